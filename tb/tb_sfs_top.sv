// tb_sfs_top: end-to-end test of the accelerator at its default sizes.
// For each of four layers (the last a fully connected layer mapped onto a
// 3x3 input map) the testbench draws random sparse filters and
// features, encodes the filters in the relative-indexed CSF stream format
// (zero runs that do not fit the index field are broken by padding
// entries), loads the three global buffers through the host ports, runs the
// layer and compares every output word with a reference computed here from
// the dense data (convolution, optional ReLU, optional 2x2 max pooling,
// shift and saturation). A last run feeds a malformed stream that runs past
// the last kernel column and expects the overflow flag.
// It counts how often each mechanism occurred (zero skipping, padding
// entries, channel accumulation, several filter batches, stride 2, pooling,
// ReLU clamping, saturation, line-buffer zero padding, a fully connected
// layer, overflow) and counts
// a failure for any that never did. The cycle count of every output position
// is checked against L+3 (L = longest kernel column).
module tb_sfs_top;
  import sfs_pkg::*;
  localparam int K = K_DEF, M = M_BATCH_DEF, FW = FW_DEF, WW = WW_DEF, IDXW = IDXW_DEF;
  localparam int NB_MAX = NB_MAX_DEF, C_MAX = C_MAX_DEF, H_MAX = H_MAX_DEF, W_MAX = W_MAX_DEF;
  localparam int NLANE = K * K;
  localparam int FEAT_AW = $clog2(C_MAX * H_MAX * W_MAX);
  localparam int FILT_DEPTH = FILT_DEPTH_DEF;
  localparam int FILT_AW = $clog2(FILT_DEPTH + 1);
  localparam int TBL_AW = $clog2(NB_MAX * C_MAX + 1);

  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic busy, done, lfb_overflow;
  logic feat_wr_en = 0; logic [FEAT_AW-1:0] feat_wr_addr; logic signed [FW-1:0] feat_wr_data;
  logic filt_wr_en = 0; logic [FILT_AW-1:0] filt_wr_addr; logic signed [WW-1:0] filt_wr_value;
  logic [IDXW-1:0] filt_wr_rel;
  logic tbl_wr_en = 0; logic [TBL_AW-1:0] tbl_wr_idx; logic [FILT_AW-1:0] tbl_wr_addr;
  logic out_valid; logic [15:0] out_addr; logic signed [FW-1:0] out_data [M];

  sfs_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_skip = 0, n_pad = 0, n_accum = 0, n_batch1 = 0, n_stride2 = 0, n_pool = 0;
  int n_relu = 0, n_sat = 0, n_lbpad = 0, n_ovf = 0, n_pad_tb = 0, n_fc = 0;

  int wt [NB_MAX][M][C_MAX][K][K];
  int ft [C_MAX][H_MAX][W_MAX];
  int exp_out [NB_MAX * H_MAX * W_MAX][M];
  bit got [NB_MAX * H_MAX * W_MAX];
  int n_entries;

  initial begin
    cfg = '0;
    feat_wr_addr = '0; feat_wr_data = '0; filt_wr_addr = '0; filt_wr_value = '0; filt_wr_rel = '0;
    tbl_wr_idx = '0; tbl_wr_addr = '0;
    for (int i = 0; i < NB_MAX * H_MAX * W_MAX; i++) got[i] = 0;
  end

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  task automatic put_entry(int value, int rel);
    @(negedge clk);
    filt_wr_en = 1; filt_wr_addr = FILT_AW'(n_entries); filt_wr_value = WW'(value); filt_wr_rel = IDXW'(rel);
    n_entries++;
    @(negedge clk);
    filt_wr_en = 0;
  endtask

  task automatic put_tbl(int idx, int addr);
    @(negedge clk);
    tbl_wr_en = 1; tbl_wr_idx = TBL_AW'(idx); tbl_wr_addr = FILT_AW'(addr);
    @(negedge clk);
    tbl_wr_en = 0;
  endtask

  // CSF encoding of stream (n, chi): positions in column-by-column order
  // pos = (r*K + c)*m + j; each kept value carries the number of zeros
  // skipped since the previous kept value; a zero run longer than the
  // index field allows is broken by a padding entry (0, 2^IDXW - 1)
  function automatic void encode(int n, int chi, ref int q_val[$], ref int q_rel[$]);
    int zeros, w, maxrel;
    maxrel = (1 << IDXW) - 1;
    zeros = 0;
    for (int pos = 0; pos < K * K * M; pos++) begin
      w = wt[n][pos % M][chi][(pos / M) / K][(pos / M) % K];
      if (w == 0) begin
        zeros++;
      end else begin
        while (zeros > maxrel) begin
          q_val.push_back(0); q_rel.push_back(maxrel);
          zeros -= maxrel + 1;
          n_pad_tb++;
        end
        q_val.push_back(w); q_rel.push_back(zeros);
        zeros = 0;
      end
    end
  endfunction

  task automatic load_filters(int nb, int c);
    int q_val[$], q_rel[$];
    n_entries = 0;
    for (int n = 0; n < nb; n++)
      for (int chi = 0; chi < c; chi++) begin
        put_tbl(n * c + chi, n_entries);
        q_val.delete(); q_rel.delete();
        encode(n, chi, q_val, q_rel);
        foreach (q_val[i]) put_entry(q_val[i], q_rel[i]);
      end
    put_tbl(nb * c, n_entries);
  endtask

  task automatic load_features(int c, int h, int w);
    for (int chi = 0; chi < c; chi++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) begin
          @(negedge clk);
          feat_wr_en = 1; feat_wr_addr = FEAT_AW'((chi * h + y) * w + x); feat_wr_data = FW'(ft[chi][y][x]);
          @(negedge clk);
          feat_wr_en = 0;
        end
  endtask

  // draw a layer and compute the expected outputs
  task automatic make_layer(int nb, int c, int h, int w, int s, bit relu, bit pool, int sh, int density);
    int ho, wo, hp, wp, acc, v, best;
    for (int n = 0; n < nb; n++)
      for (int j = 0; j < M; j++)
        for (int chi = 0; chi < c; chi++)
          for (int r = 0; r < K; r++)
            for (int cc = 0; cc < K; cc++)
            begin
              int roll;
              roll = int'($urandom_range(99, 0));
              wt[n][j][chi][r][cc] = (roll < density) ? int'($urandom_range(254, 0)) - 127 : 0;
            end
    for (int chi = 0; chi < c; chi++)
      for (int y = 0; y < h; y++)
        for (int x = 0; x < w; x++) ft[chi][y][x] = int'($urandom % 256) - 128;
    ho = (h - K) / s + 1; wo = (w - K) / s + 1;
    hp = pool ? ho / 2 : ho; wp = pool ? wo / 2 : wo;
    for (int n = 0; n < nb; n++)
      for (int py = 0; py < hp; py++)
        for (int px = 0; px < wp; px++)
          for (int j = 0; j < M; j++) begin
            best = 0;
            for (int d = 0; d < (pool ? 4 : 1); d++) begin
              int y, x;
              y = pool ? 2 * py + d / 2 : py; x = pool ? 2 * px + d % 2 : px;
              acc = 0;
              for (int chi = 0; chi < c; chi++)
                for (int r = 0; r < K; r++)
                  for (int cc = 0; cc < K; cc++)
                    acc += wt[n][j][chi][r][cc] * ft[chi][s * y + r][s * x + cc];
              if (relu && acc < 0) begin acc = 0; n_relu++; end
              if (d == 0 || acc > best) best = acc;
            end
            v = best >>> sh;
            if (v != sat(v)) n_sat++;
            exp_out[n * hp * wp + py * wp + px][j] = sat(v);
          end
    cfg.c = 10'(c); cfg.h = 8'(h); cfg.w = 8'(w); cfg.s = 4'(s); cfg.nb = 6'(nb);
    cfg.relu_en = relu; cfg.pool_en = pool; cfg.out_shift = 6'(sh);
    if (s == 2) n_stride2++;
    if (pool) n_pool++;
    if (nb > 1) n_batch1++;
    if (w < W_MAX) n_lbpad++;
  endtask

  task automatic run_layer(int nb, int c, int h, int w, int s, bit pool);
    int ho, wo, nout, seen, t0;
    ho = (h - K) / s + 1; wo = (w - K) / s + 1;
    nout = nb * (pool ? (ho / 2) * (wo / 2) : ho * wo);
    for (int i = 0; i < nout; i++) got[i] = 0;
    load_filters(nb, c);
    load_features(c, h, w);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    seen = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (out_valid) begin
        checks++;
        if (int'(out_addr) >= nout || got[out_addr]) begin
          failures++; $display("unexpected output address %0d", out_addr);
        end else begin
          got[out_addr] = 1; seen++;
          for (int j = 0; j < M; j++)
            if (int'(out_data[j]) != exp_out[out_addr][j]) begin
              failures++;
              $display("addr %0d ch %0d got %0d exp %0d", out_addr, j, out_data[j], exp_out[out_addr][j]);
              break;
            end
        end
      end
    end
    checks++;
    if (seen != nout) begin failures++; $display("saw %0d outputs, expected %0d", seen, nout); end
  endtask

  // observe internal events of the run
  int mpu_t0, mpu_L;
  always @(posedge clk) begin
    if (dut.mpu_start) begin
      mpu_t0 = 0; mpu_L = 0;
      for (int k = 0; k < NLANE; k++) begin
        if (int'(dut.lf_cnt[k]) < M) n_skip++;
        if (int'(dut.lf_cnt[k]) > mpu_L) mpu_L = int'(dut.lf_cnt[k]);
      end
    end else mpu_t0++;
    if (dut.mpu_done) begin
      checks++;
      if (mpu_t0 != (mpu_L == 0 ? 1 : mpu_L + 3)) begin
        failures++; $display("position took %0d cycles, expected %0d", mpu_t0, mpu_L + 3);
      end
    end
    if (dut.lfb_in_valid && dut.gf_value == 0) n_pad++;
    if (dut.ob_wr_en && dut.ob_add_old) n_accum++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // layer 1: 3 channels, 2 batches (32 filters), stride 1, ReLU + pool
    make_layer(2, 3, 10, 10, 1, 1, 1, 3, 30);
    run_layer(2, 3, 10, 10, 1, 1);
    // layer 2: very sparse, stride 2, no ReLU, no pool, no shift (saturates)
    make_layer(1, 2, 11, 9, 2, 0, 0, 0, 8);
    run_layer(1, 2, 11, 9, 2, 0);
    // layer 3: full-width rows, one channel, denser
    make_layer(1, 1, W_MAX, W_MAX, 1, 1, 0, 6, 60);
    cfg.w = 8'(W_MAX);
    run_layer(1, 1, W_MAX, W_MAX, 1, 0);
    // layer 4: a fully connected layer written as a 3x3 "convolution" over a
    // 3x3 map: 16 channels x 9 = 144 inputs, 32 outputs, one output pixel
    make_layer(2, 16, 3, 3, 1, 1, 0, 5, 10);
    run_layer(2, 16, 3, 3, 1, 0);
    n_fc++;
    checks++;
    if (lfb_overflow) begin failures++; $display("overflow flag set by a valid stream"); end
    // malformed stream: one entry more than the K*K*m positions
    n_entries = 0;
    put_tbl(0, 0);
    for (int i = 0; i <= K * K * M; i++) put_entry(1, 0);
    put_tbl(1, n_entries);
    cfg.c = 1; cfg.h = 3; cfg.w = 3; cfg.s = 1; cfg.nb = 1; cfg.pool_en = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    checks++;
    if (lfb_overflow) n_ovf++; else begin failures++; $display("overflow not flagged"); end

    $display("padding entries written %0d", n_pad_tb);
    $display("events: skip=%0d pad=%0d accum=%0d multibatch=%0d stride2=%0d pool=%0d relu=%0d sat=%0d lbpad=%0d ovf=%0d",
             n_skip, n_pad, n_accum, n_batch1, n_stride2, n_pool, n_relu, n_sat, n_lbpad, n_ovf);
    if (n_skip == 0)    begin failures++; $display("no zero skipping seen"); end
    if (n_pad == 0)     begin failures++; $display("no padding entry seen"); end
    if (n_accum == 0)   begin failures++; $display("no channel accumulation seen"); end
    if (n_batch1 == 0)  begin failures++; $display("no multi-batch layer"); end
    if (n_stride2 == 0) begin failures++; $display("no stride 2 layer"); end
    if (n_pool == 0)    begin failures++; $display("no pooling"); end
    if (n_relu == 0)    begin failures++; $display("no ReLU clamp"); end
    if (n_sat == 0)     begin failures++; $display("no saturation"); end
    if (n_lbpad == 0)   begin failures++; $display("no line-buffer padding"); end
    if (n_ovf == 0)     begin failures++; $display("no overflow"); end
    if (n_fc == 0)      begin failures++; $display("no fully connected layer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
