// tb_window_registers: loads random K x K windows and checks the flattened
// order r*K + c, and that the window holds while load is low.
module tb_window_registers;
  localparam int FW = 8, K = 3;
  logic clk = 0, rst_n = 0, load = 0;
  logic signed [FW-1:0] win_in [K][K];
  logic signed [FW-1:0] v [K*K];
  logic signed [FW-1:0] ref_w [K][K];
  int checks = 0, failures = 0;

  window_registers #(.FW(FW), .K(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int r = 0; r < K; r++) for (int c = 0; c < K; c++) win_in[r][c] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int r = 0; r < K; r++) for (int c = 0; c < K; c++) begin
        win_in[r][c] = FW'($urandom); ref_w[r][c] = win_in[r][c];
      end
      load = 1;
      @(negedge clk);
      load = 0;
      for (int r = 0; r < K; r++) for (int c = 0; c < K; c++) win_in[r][c] = FW'($urandom);
      @(negedge clk);
      for (int r = 0; r < K; r++) for (int c = 0; c < K; c++) begin
        checks++;
        if (v[r*K+c] != ref_w[r][c]) begin failures++; $display("t=%0d r=%0d c=%0d", t, r, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
