// tb_center_controller: the testbench stands in for the buffers and the main
// process unit (stream start table, mpu_done after a random delay) and checks
// the control sequence for several layer shapes: filter stream reads cover
// each (batch, channel) stream exactly, feature reads address rows S*y+r of
// the current channel, the line buffer shifts W_MAX + (W'-1)*S times per
// output row, partial sums are written in raster order with accumulation
// from the second channel on, and the post-processing pass produces every
// output address once in order with correct first/last flags.
module tb_center_controller;
  import sfs_pkg::*;
  localparam int K = 3, W_MAX = 16;
  localparam int FEAT_AW = 14, FILT_AW = 14, TBL_AW = 7, OUT_AW = 10, TAGW = 16;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic busy, done;
  logic [TBL_AW-1:0] tbl_rd_idx;
  logic [FILT_AW-1:0] tbl_rd_addr, filt_rd_addr;
  logic filt_rd_en, lfb_clear, lfb_in_valid, feat_rd_en, lb_shift, lb_zero, win_load, mpu_start;
  logic mpu_done = 0;
  logic [FEAT_AW-1:0] feat_rd_addr [K];
  logic ob_rd_en, ob_wr_en, ob_add_old, pp_valid, pp_first, pp_last, relu_en;
  logic [OUT_AW-1:0] ob_rd_addr, ob_wr_addr;
  logic [TAGW-1:0] pp_tag;
  logic [5:0] out_shift;
  int checks = 0, failures = 0;
  int tbl [64];

  center_controller #(.K(K), .W_MAX(W_MAX), .FEAT_AW(FEAT_AW), .FILT_AW(FILT_AW),
                      .TBL_AW(TBL_AW), .OUT_AW(OUT_AW), .TAGW(TAGW)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  assign tbl_rd_addr = FILT_AW'(tbl[tbl_rd_idx]);

  // environment: done some cycles after each start
  initial begin
    forever begin
      @(posedge clk);
      if (mpu_start) begin
        repeat ($urandom_range(4, 1)) @(posedge clk);
        mpu_done <= 1; @(posedge clk); mpu_done <= 0;
      end
    end
  end

  task automatic run(int nb, int c, int h, int w, int s, bit pool);
    int ho, wo, hp, wp, nwr, nfilt, nstarts, nshift, npp, nlast, rowshifts, fexp, exp_stream;
    int ch, fstream;
    ho = (h - K) / s + 1; wo = (w - K) / s + 1;
    hp = pool ? ho / 2 : ho; wp = pool ? wo / 2 : wo;
    for (int t = 0; t <= nb * c; t++) tbl[t] = t * 5 + (t % 3);   // streams of 5..7 entries
    cfg = '0; cfg.c = 10'(c); cfg.h = 8'(h); cfg.w = 8'(w); cfg.s = 4'(s); cfg.nb = 6'(nb); cfg.pool_en = pool;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    nwr = 0; nfilt = 0; nstarts = 0; nshift = 0; npp = 0; nlast = 0; rowshifts = 0; fexp = tbl[0];
    while (!done) begin
      @(posedge clk);
      if (filt_rd_en) begin
        checks++;
        if (int'(filt_rd_addr) != fexp) begin failures++; $display("filter read %0d exp %0d", filt_rd_addr, fexp); end
        fexp++; nfilt++;
      end
      if (lb_shift) nshift++;
      if (mpu_start) nstarts++;
      if (feat_rd_en) begin
        int blk, y, chn;
        blk = nwr / (ho * wo);                 // (batch, channel) pass number
        chn = blk % c;
        y = (nwr % (ho * wo)) / wo;
        checks++;
        for (int r = 0; r < K; r++)
          if (int'(feat_rd_addr[r]) / w != chn * h + s * y + r) begin
            failures++; $display("feature read row %0d exp %0d", int'(feat_rd_addr[r]) / w, chn * h + s * y + r); break;
          end
      end
      if (ob_wr_en) begin
        int blk;
        blk = nwr / (ho * wo);
        checks++;
        if (int'(ob_wr_addr) != nwr % (ho * wo) || ob_add_old != ((blk % c) != 0)) begin
          failures++; $display("partial sum write %0d add %0d (n %0d)", ob_wr_addr, ob_add_old, nwr);
        end
        nwr++;
      end
      if (pp_valid) begin
        npp++;
        checks++;
        if (pool ? (pp_first != ((npp - 1) % 4 == 0) || pp_last != ((npp - 1) % 4 == 3)) : !(pp_first && pp_last)) begin
          failures++; $display("pp flags wrong at %0d", npp);
        end
        if (pp_last) begin
          checks++;
          if (int'(pp_tag) != nlast) begin failures++; $display("tag %0d exp %0d", pp_tag, nlast); end
          nlast++;
        end
      end
    end
    checks += 5;
    exp_stream = tbl[nb * c] - tbl[0];
    if (nfilt != exp_stream) begin failures++; $display("read %0d filter entries, exp %0d", nfilt, exp_stream); end
    if (nstarts != nb * c * ho * wo) begin failures++; $display("%0d starts", nstarts); end
    if (nwr != nb * c * ho * wo) begin failures++; $display("%0d writes", nwr); end
    if (nshift != nb * c * ho * (W_MAX + (wo - 1) * s)) begin failures++; $display("%0d shifts", nshift); end
    if (nlast != nb * hp * wp) begin failures++; $display("%0d outputs", nlast); end
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(1, 1, 5, 5, 1, 0);
    run(2, 3, 8, 7, 1, 1);
    run(1, 2, 11, 16, 2, 0);
    run(3, 2, 9, 10, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
