// tb_main_process_unit: the testbench plays the local filter buffer (per
// column lists of kept weights with column-relative filter indices, read
// combinationally) and the window registers. For random sparse columns,
// including padding zeros, empty columns and full columns, it starts one
// output position, checks that done comes L+3 cycles later (L = longest
// column; 1 cycle when all are empty) and that acc[j] = sum_k W[k][j]*V[k].
module tb_main_process_unit;
  localparam int K = 3, M = 16, WW = 8, FW = 8, IDXW = 3, ACCW = 32, NLANE = K * K;
  localparam int EW = $clog2(M), CW = $clog2(M + 1);
  logic clk = 0, rst_n = 0, start = 0;
  logic signed [FW-1:0] v [NLANE];
  logic [CW-1:0] cnt [NLANE];
  logic [EW-1:0] rd_e [NLANE];
  logic signed [WW-1:0] rd_value [NLANE];
  logic [IDXW-1:0] rd_rel [NLANE];
  logic busy, done;
  logic signed [ACCW-1:0] acc [M];
  int checks = 0, failures = 0;
  int col_val [NLANE][M];
  int col_rel [NLANE][M];
  int w [NLANE][M];

  main_process_unit #(.K(K), .M_BATCH(M), .WW(WW), .FW(FW), .IDXW(IDXW), .ACCW(ACCW)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always_comb
    for (int k = 0; k < NLANE; k++) begin
      rd_value[k] = WW'(col_val[k][rd_e[k]]);
      rd_rel[k]   = IDXW'(col_rel[k][rd_e[k]]);
    end

  task automatic run(int density);
    int L, cyc, maxrel;
    maxrel = (1 << IDXW) - 1;
    L = 0;
    for (int k = 0; k < NLANE; k++) begin
      int n, last, zeros;
      n = 0; last = -1; zeros = 0;
      v[k] = FW'(int'($urandom_range(255, 0)) - 128);
      for (int j = 0; j < M; j++) begin
        int roll;
        roll = int'($urandom_range(99, 0));
        w[k][j] = (roll < density) ? int'($urandom_range(254, 0)) - 127 : 0;
        if (w[k][j] == 0) zeros++;
        else begin
          while (zeros > maxrel) begin
            col_val[k][n] = 0; col_rel[k][n] = maxrel; n++; zeros -= maxrel + 1;
          end
          col_val[k][n] = w[k][j]; col_rel[k][n] = zeros; n++; zeros = 0;
        end
      end
      cnt[k] = CW'(n);
      if (n > L) L = n;
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    #1;
    while (!done) begin @(negedge clk); #1; cyc++; end
    checks++;
    if (cyc != (L == 0 ? 1 : L + 3)) begin failures++; $display("L=%0d took %0d cycles", L, cyc); end
    for (int j = 0; j < M; j++) begin
      int e;
      e = 0;
      for (int k = 0; k < NLANE; k++) e += w[k][j] * int'(v[k]);
      checks++;
      if (int'(acc[j]) != e) begin failures++; $display("acc[%0d]=%0d exp %0d", j, acc[j], e); end
    end
  endtask

  initial begin
    for (int k = 0; k < NLANE; k++) begin
      v[k] = '0; cnt[k] = '0;
      for (int e = 0; e < M; e++) begin col_val[k][e] = 0; col_rel[k][e] = 0; end
    end
    repeat (2) @(negedge clk); rst_n = 1;
    run(0); run(100);
    for (int t = 0; t < 60; t++) run(int'($urandom_range(100, 0)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
