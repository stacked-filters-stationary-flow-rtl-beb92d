// tb_alexnet_conv: runs the 3x3 convolution layers of AlexNet on the
// accelerator at its default sizes: conv3 (13x13x256 input, zero padded to
// 15x15, 384 filters), and one group each of conv4 (192 channels, 192
// filters) and conv5 (192 channels, 128 filters), all stride 1 with ReLU.
// The weights are random with the density the pruned AlexNet keeps in these
// layers (about 35 % for conv3, 37 % for conv4 and conv5); features are
// random 8-bit values. Every output word is compared with a reference
// convolution computed here. The testbench also prints the cycle count and
// two ratios: MACs on nonzero weights over all MACs performed (padding
// zeros are the only zero-weight MACs), and lane occupancy, MACs performed
// over K*K times the cycles the main process unit is busy.
module tb_alexnet_conv;
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
  int n_relu = 0, n_sat = 0, n_lbpad = 0, n_ovf = 0, n_pad_tb = 0;

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
    repeat (100000000) @(posedge clk);
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

  longint mpu_cycles = 0, nz_macs = 0, all_macs = 0;
  always @(posedge clk) begin
    if (dut.u_mpu.busy) mpu_cycles++;
    for (int k = 0; k < NLANE; k++)
      if (dut.u_mpu.f_out_valid[k]) begin
        all_macs++;
        if (dut.u_mpu.f_out_data[k][WW+FW+$clog2(M)-1 -: WW] != 0) nz_macs++;
      end
  end

  task automatic layer(string name, int nb, int c, int hw, int density);
    longint t0, t1;
    t0 = cyc;
    mpu_cycles = 0; nz_macs = 0; all_macs = 0;
    make_layer(nb, c, hw, hw, 1, 1, 0, 9, density);
    run_layer(nb, c, hw, hw, 1, 0);
    t1 = cyc;
    $display("%s: %0d CSF entries stored (%0d padding)", name, n_entries, n_pad_tb);
    n_pad_tb = 0;
    $display("%s: %0d cycles including loading, main process unit busy %0d cycles", name, t1 - t0, mpu_cycles);
    $display("%s: MACs performed %0d, of them on nonzero weights %0d (%0d.%0d %%), lane occupancy %0d %%", name,
             all_macs, nz_macs, (nz_macs * 100) / all_macs, ((nz_macs * 1000) / all_macs) % 10,
             (all_macs * 100) / (mpu_cycles * NLANE));
  endtask

  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    layer("conv3", 24, 256, 15, 35);
    layer("conv4 (one group)", 12, 192, 15, 37);
    layer("conv5 (one group)", 8, 192, 15, 37);
    checks++;
    if (lfb_overflow) begin failures++; $display("overflow flag set"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
