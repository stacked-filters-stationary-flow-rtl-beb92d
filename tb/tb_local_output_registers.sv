// tb_local_output_registers: random lane products with random filter
// indices (often several lanes on the same filter in one cycle) are
// accumulated and compared with a model; clear is checked too.
module tb_local_output_registers;
  localparam int NLANE = 9, M = 16, PRW = 16, ACCW = 32, JW = 4;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid [NLANE];
  logic [JW-1:0] in_j [NLANE];
  logic signed [PRW-1:0] in_prod [NLANE];
  logic signed [ACCW-1:0] acc [M];
  int checks = 0, failures = 0, ncollide = 0;
  int model [M];

  local_output_registers #(.NLANE(NLANE), .M_BATCH(M), .PRW(PRW), .ACCW(ACCW)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int k = 0; k < NLANE; k++) begin in_valid[k] = 0; in_j[k] = '0; in_prod[k] = '0; end
    for (int j = 0; j < M; j++) model[j] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int hits [M];
      @(negedge clk);
      for (int j = 0; j < M; j++) hits[j] = 0;
      if (t % 100 == 50) begin
        clear = 1;
        for (int k = 0; k < NLANE; k++) in_valid[k] = 0;
        for (int j = 0; j < M; j++) model[j] = 0;
      end else begin
        clear = 0;
        for (int k = 0; k < NLANE; k++) begin
          in_valid[k] = ($urandom_range(1, 0) == 1);
          in_j[k] = JW'($urandom_range(3, 0) * (t % 4 + 1));
          in_prod[k] = PRW'(int'($urandom_range(65535, 0)) - 32768);
          if (in_valid[k]) begin model[in_j[k]] += int'(in_prod[k]); hits[in_j[k]]++; end
        end
        for (int j = 0; j < M; j++) if (hits[j] > 1) ncollide++;
      end
      @(negedge clk);
      clear = 0;
      for (int k = 0; k < NLANE; k++) in_valid[k] = 0;
      for (int j = 0; j < M; j++) begin
        checks++;
        if (int'(acc[j]) != model[j]) begin failures++; $display("t=%0d acc[%0d]=%0d exp %0d", t, j, acc[j], model[j]); end
      end
    end
    checks++;
    if (ncollide == 0) begin failures++; $display("no same-filter collisions"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
