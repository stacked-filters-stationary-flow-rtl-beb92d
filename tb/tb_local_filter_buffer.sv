// tb_local_filter_buffer: encodes random sparse weights of m filters x K*K
// positions in the CSF stream format (with padding entries for long zero
// runs), streams them in, then rebuilds the dense weights from every column
// (entry count, values, relative filter indices) and compares. Repeats with
// several densities, also an all-zero column set, and finally checks that a
// stream running past the last column sets the overflow flag and that clear
// resets it.
module tb_local_filter_buffer;
  localparam int K = 3, M = 16, WW = 8, IDXW = 3, NCOL = K * K;
  localparam int EW = $clog2(M), CW = $clog2(M + 1);
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [WW-1:0] in_value = '0;
  logic [IDXW-1:0] in_rel = '0;
  logic [EW-1:0] rd_e [NCOL];
  logic signed [WW-1:0] rd_value [NCOL];
  logic [IDXW-1:0] rd_rel [NCOL];
  logic [CW-1:0] cnt [NCOL];
  logic overflow;
  int checks = 0, failures = 0, npad = 0;
  int w [NCOL][M];
  int ecnt [NCOL];

  local_filter_buffer #(.K(K), .M_BATCH(M), .WW(WW), .IDXW(IDXW)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic push(int v, int rel, int pos);
    @(negedge clk); in_valid = 1; in_value = WW'(v); in_rel = IDXW'(rel);
    ecnt[pos / M]++;
    @(negedge clk); in_valid = 0;
  endtask

  task automatic run(int density);
    int zeros, last, maxrel;
    maxrel = (1 << IDXW) - 1;
    for (int k = 0; k < NCOL; k++) begin
      ecnt[k] = 0;
      for (int j = 0; j < M; j++) begin
        int roll;
        roll = int'($urandom_range(99, 0));
        w[k][j] = (roll < density) ? int'($urandom_range(254, 0)) - 127 : 0;
      end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    zeros = 0; last = -1;
    for (int pos = 0; pos < NCOL * M; pos++) begin
      if (w[pos / M][pos % M] == 0) zeros++;
      else begin
        while (zeros > maxrel) begin
          last += maxrel + 1; push(0, maxrel, last); zeros -= maxrel + 1; npad++;
        end
        last += zeros + 1; push(w[pos / M][pos % M], zeros, last); zeros = 0;
      end
    end
    // rebuild each column from the buffer
    for (int k = 0; k < NCOL; k++) begin
      int rec [M];
      int j;
      for (int jj = 0; jj < M; jj++) rec[jj] = 0;
      checks++;
      if (int'(cnt[k]) != ecnt[k]) begin failures++; $display("col %0d count %0d exp %0d", k, cnt[k], ecnt[k]); end
      j = -1;
      for (int e = 0; e < int'(cnt[k]); e++) begin
        rd_e[k] = EW'(e); #1;
        j = j + 1 + int'(rd_rel[k]);
        if (j < M) rec[j] = int'(rd_value[k]);
      end
      for (int jj = 0; jj < M; jj++) begin
        checks++;
        if (rec[jj] != w[k][jj]) begin failures++; $display("col %0d filter %0d got %0d exp %0d", k, jj, rec[jj], w[k][jj]); end
      end
    end
    checks++;
    if (overflow) begin failures++; $display("unexpected overflow"); end
  endtask

  initial begin
    for (int k = 0; k < NCOL; k++) rd_e[k] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(30); run(5); run(90); run(0); run(100); run(50);
    checks++;
    if (npad == 0) begin failures++; $display("no padding entries exercised"); end
    // overflow: NCOL*M + 1 dense entries
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int i = 0; i <= NCOL * M; i++) begin
      @(negedge clk); in_valid = 1; in_value = 1; in_rel = 0;
    end
    @(negedge clk); in_valid = 0;
    checks++;
    if (!overflow) begin failures++; $display("overflow not flagged"); end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (overflow || cnt[0] != 0) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
