// tb_computation_fifo: random push/pop traffic against a queue model;
// checks order, data, full back-pressure (in_ready low when full and not
// popping) and flush.
module tb_computation_fifo;
  localparam int DW = 12, DEPTH = 4;
  logic clk = 0, rst_n = 0, flush = 0, in_valid = 0, out_ready = 0;
  logic in_ready, out_valid;
  logic [DW-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0, nfull = 0;
  logic [DW-1:0] q [$];

  computation_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(99, 0) < 60);
      out_ready = ($urandom_range(99, 0) < (t < 1000 ? 40 : 70));
      in_data   = DW'($urandom);
      #1;
      checks++;
      if (out_valid != (q.size() != 0)) begin failures++; $display("t=%0d valid mismatch", t); end
      if (out_valid && out_data != q[0]) begin failures++; $display("t=%0d data mismatch", t); end
      if (q.size() == DEPTH && !out_ready) begin
        nfull++; checks++;
        if (in_ready) begin failures++; $display("t=%0d ready while full", t); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    @(negedge clk); in_valid = 0; out_ready = 0; flush = 1;
    @(negedge clk); flush = 0; q.delete();
    checks++;
    if (out_valid) begin failures++; $display("flush failed"); end
    checks++;
    if (nfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
