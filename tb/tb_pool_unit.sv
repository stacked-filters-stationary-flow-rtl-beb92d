// tb_pool_unit: 4-value windows (first..last) and single-value windows
// (bypass) of random signed values; checks the per-channel maximum, the
// tag and that out_valid is a one-cycle pulse one cycle after in_last.
module tb_pool_unit;
  localparam int M = 4, ACCW = 32, TAGW = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_last = 0, out_valid;
  logic [TAGW-1:0] in_tag = '0, out_tag;
  logic signed [ACCW-1:0] in_data [M];
  logic signed [ACCW-1:0] out_data [M];
  int checks = 0, failures = 0;

  pool_unit #(.M_BATCH(M), .ACCW(ACCW), .TAGW(TAGW)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int j = 0; j < M; j++) in_data[j] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      int n, mx [M];
      n = t[0] ? 4 : 1;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("t=%0d output inside a window", t); end
        in_valid = 1; in_first = (i == 0); in_last = (i == n - 1); in_tag = TAGW'(t);
        for (int j = 0; j < M; j++) begin
          in_data[j] = ACCW'(int'($urandom_range(2000, 0)) - 1000);
          if (i == 0 || int'(in_data[j]) > mx[j]) mx[j] = int'(in_data[j]);
        end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_tag != TAGW'(t)) begin failures++; $display("t=%0d no output / tag", t); end
      for (int j = 0; j < M; j++) begin
        checks++;
        if (int'(out_data[j]) != mx[j]) begin failures++; $display("t=%0d ch %0d got %0d exp %0d", t, j, out_data[j], mx[j]); end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("t=%0d out_valid longer than one cycle", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
