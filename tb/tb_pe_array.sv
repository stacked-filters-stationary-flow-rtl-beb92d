// tb_pe_array: random signed weight/feature pairs; checks each product,
// its filter index and the one-cycle latency.
module tb_pe_array;
  localparam int WW = 8, FW = 8, JW = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic signed [WW-1:0] in_w = '0;
  logic signed [FW-1:0] in_v = '0;
  logic [JW-1:0] in_j = '0, out_j;
  logic signed [WW+FW-1:0] out_prod;
  int checks = 0, failures = 0;

  pe_array #(.WW(WW), .FW(FW), .JW(JW)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int ew, ev, ej; bit vld;
      @(negedge clk);
      vld = ($urandom_range(3, 0) != 0);
      ew = int'($urandom_range(255, 0)) - 128; ev = int'($urandom_range(255, 0)) - 128; ej = int'($urandom_range(15, 0));
      in_valid = vld; in_w = WW'(ew); in_v = FW'(ev); in_j = JW'(ej);
      checks++;
      if (!in_ready) begin failures++; $display("not ready"); end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (out_valid != vld || (vld && (int'(out_prod) != ew * ev || int'(out_j) != ej))) begin
        failures++; $display("t=%0d %0d*%0d got %0d (j %0d/%0d)", t, ew, ev, out_prod, out_j, ej);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
