// tb_line_buffer: shifts W_MAX known columns into the line buffer and checks
// that the leftmost K x K block is columns 0..K-1 of the K rows; then shifts
// one more column and checks that the window moved by one.
module tb_line_buffer;
  localparam int FW = 8, K = 3, W_MAX = 8;
  logic clk = 0, rst_n = 0, shift_en = 0;
  logic signed [FW-1:0] col_in [K];
  logic signed [FW-1:0] win_cols [K][K];
  int checks = 0, failures = 0;

  line_buffer #(.FW(FW), .K(K), .W_MAX(W_MAX)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic signed [FW-1:0] v(int r, int x); return FW'(r * 16 + x); endfunction

  task automatic check(int x0);
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        checks++;
        if (win_cols[r][c] != v(r, x0 + c)) begin
          failures++; $display("x0=%0d r=%0d c=%0d got %0d", x0, r, c, win_cols[r][c]);
        end
      end
  endtask

  initial begin
    for (int r = 0; r < K; r++) col_in[r] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int x = 0; x < W_MAX + 3; x++) begin
      @(negedge clk);
      shift_en = 1;
      for (int r = 0; r < K; r++) col_in[r] = v(r, x);
      @(negedge clk);
      shift_en = 0;
      if (x >= W_MAX - 1) check(x - W_MAX + 1);
    end
    // hold: no shift, window unchanged
    repeat (3) @(negedge clk);
    check(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
