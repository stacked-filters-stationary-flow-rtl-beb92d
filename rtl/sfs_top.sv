// sfs_top: sparse CNN layer accelerator built around the stacked-filters-
// stationary flow and the relative-indexed compressed sparse filter (CSF)
// format. m filters of one input channel are held in a local filter buffer,
// column by column: for each of the K*K kernel positions the list of kept
// (nonzero or padding) weights of the m filters with relative filter
// indices. A K x K window of the same channel, cut from a K-row line buffer,
// is multiplied element by element with these columns in K*K parallel lanes
// (computation FIFO + multiplier per lane), so every cycle spent is a MAC on
// a kept weight. Per output position the m sums land in the local output
// registers and are added to the partial sums of earlier channels in the
// global output buffer. When all channels of a batch are done, NL (ReLU),
// Pool (2x2 max) and the output formatter (shift and saturate) write the m
// output channels of each position out; then the next batch of m filters
// follows.
// Interface: the three global buffers are filled through host write ports
// before start (features V_i[chi][row][x] at (chi*H+row)*W+x; CSF entries
// and the stream start table, stream t = n*C+chi, table entry t+1 = end of
// stream t); cfg gives the layer shape; results leave on out_valid/out_addr/
// out_data, one word of m FW-bit channels per output position, address
// n*HP*WP + py*WP + px for batch n. done pulses at the end of the layer.
// The block structure follows the processor diagram; widths, sizes, the NL,
// pool and format functions and all handshakes are this design's choices.
module sfs_top
  import sfs_pkg::*;
#(
  parameter int unsigned K          = sfs_pkg::K_DEF,
  parameter int unsigned M_BATCH    = sfs_pkg::M_BATCH_DEF,
  parameter int unsigned FW         = sfs_pkg::FW_DEF,
  parameter int unsigned WW         = sfs_pkg::WW_DEF,
  parameter int unsigned IDXW       = sfs_pkg::IDXW_DEF,
  parameter int unsigned ACCW       = sfs_pkg::ACCW_DEF,
  parameter int unsigned W_MAX      = sfs_pkg::W_MAX_DEF,
  parameter int unsigned H_MAX      = sfs_pkg::H_MAX_DEF,
  parameter int unsigned C_MAX      = sfs_pkg::C_MAX_DEF,
  parameter int unsigned NB_MAX     = sfs_pkg::NB_MAX_DEF,
  parameter int unsigned FILT_DEPTH = sfs_pkg::FILT_DEPTH_DEF,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NLANE     = K * K,
  localparam int unsigned FEAT_AW   = $clog2(C_MAX * H_MAX * W_MAX),
  localparam int unsigned FILT_AW   = $clog2(FILT_DEPTH + 1),
  localparam int unsigned NSTREAM   = NB_MAX * C_MAX,
  localparam int unsigned TBL_AW    = $clog2(NSTREAM + 1),
  localparam int unsigned OUT_AW    = $clog2(H_MAX * W_MAX),
  localparam int unsigned TAGW      = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg,
  output logic                 busy,
  output logic                 done,
  output logic                 lfb_overflow,
  // host side of the global feature buffer
  input  logic                 feat_wr_en,
  input  logic [FEAT_AW-1:0]   feat_wr_addr,
  input  logic signed [FW-1:0] feat_wr_data,
  // host side of the global filter buffer
  input  logic                 filt_wr_en,
  input  logic [FILT_AW-1:0]   filt_wr_addr,
  input  logic signed [WW-1:0] filt_wr_value,
  input  logic [IDXW-1:0]      filt_wr_rel,
  input  logic                 tbl_wr_en,
  input  logic [TBL_AW-1:0]    tbl_wr_idx,
  input  logic [FILT_AW-1:0]   tbl_wr_addr,
  // results towards the output RAM
  output logic                 out_valid,
  output logic [TAGW-1:0]      out_addr,
  output logic signed [FW-1:0] out_data [M_BATCH]
);
  localparam int unsigned EW = $clog2(M_BATCH);
  localparam int unsigned CW = $clog2(M_BATCH + 1);

  // controller signals
  logic [TBL_AW-1:0]  tbl_rd_idx;
  logic [FILT_AW-1:0] tbl_rd_addr, filt_rd_addr;
  logic               filt_rd_en, lfb_clear, lfb_in_valid;
  logic               feat_rd_en, lb_shift, lb_zero, win_load, mpu_start, mpu_done;
  logic [FEAT_AW-1:0] feat_rd_addr [K];
  logic               ob_rd_en, ob_wr_en, ob_add_old;
  logic [OUT_AW-1:0]  ob_rd_addr, ob_wr_addr;
  logic               pp_valid, pp_first, pp_last;
  logic [TAGW-1:0]    pp_tag;
  logic               relu_en;
  logic [5:0]         out_shift;

  center_controller #(.K(K), .W_MAX(W_MAX), .FEAT_AW(FEAT_AW), .FILT_AW(FILT_AW),
                      .TBL_AW(TBL_AW), .OUT_AW(OUT_AW), .TAGW(TAGW)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .tbl_rd_idx, .tbl_rd_addr, .filt_rd_en, .filt_rd_addr,
    .lfb_clear, .lfb_in_valid,
    .feat_rd_en, .feat_rd_addr, .lb_shift, .lb_zero,
    .win_load, .mpu_start, .mpu_done,
    .ob_rd_en, .ob_rd_addr, .ob_wr_en, .ob_wr_addr, .ob_add_old,
    .pp_valid, .pp_first, .pp_last, .pp_tag, .relu_en, .out_shift
  );

  // ---------------- filters: global -> local filter buffer ----------------
  logic signed [WW-1:0] gf_value;
  logic [IDXW-1:0]      gf_rel;

  global_filter_buffer #(.WW(WW), .IDXW(IDXW), .DEPTH(FILT_DEPTH), .NSTREAM(NSTREAM)) u_gfb (
    .clk,
    .wr_en(filt_wr_en), .wr_addr(filt_wr_addr), .wr_value(filt_wr_value), .wr_rel(filt_wr_rel),
    .tbl_wr_en, .tbl_wr_idx, .tbl_wr_addr,
    .tbl_rd_idx, .tbl_rd_addr,
    .rd_en(filt_rd_en), .rd_addr(filt_rd_addr), .rd_value(gf_value), .rd_rel(gf_rel)
  );

  logic [EW-1:0]        lf_rd_e   [NLANE];
  logic signed [WW-1:0] lf_value  [NLANE];
  logic [IDXW-1:0]      lf_rel    [NLANE];
  logic [CW-1:0]        lf_cnt    [NLANE];

  local_filter_buffer #(.K(K), .M_BATCH(M_BATCH), .WW(WW), .IDXW(IDXW)) u_lfb (
    .clk, .rst_n, .clear(lfb_clear),
    .in_valid(lfb_in_valid), .in_value(gf_value), .in_rel(gf_rel),
    .rd_e(lf_rd_e), .rd_value(lf_value), .rd_rel(lf_rel), .cnt(lf_cnt),
    .overflow(lfb_overflow)
  );

  // ---------------- features: global -> line buffer -> window --------------
  logic signed [FW-1:0] gfeat   [K];
  logic signed [FW-1:0] lb_col  [K];
  logic signed [FW-1:0] lb_win  [K][K];
  logic signed [FW-1:0] win_v   [NLANE];

  global_feature_buffer #(.FW(FW), .K(K), .DEPTH(C_MAX * H_MAX * W_MAX)) u_gfeat (
    .clk, .wr_en(feat_wr_en), .wr_addr(feat_wr_addr), .wr_data(feat_wr_data),
    .rd_en(feat_rd_en), .rd_addr(feat_rd_addr), .rd_data(gfeat)
  );

  always_comb begin
    for (int r = 0; r < K; r++) lb_col[r] = lb_zero ? '0 : gfeat[r];
  end

  line_buffer #(.FW(FW), .K(K), .W_MAX(W_MAX)) u_lb (
    .clk, .rst_n, .shift_en(lb_shift), .col_in(lb_col), .win_cols(lb_win)
  );

  window_registers #(.FW(FW), .K(K)) u_win (
    .clk, .rst_n, .load(win_load), .win_in(lb_win), .v(win_v)
  );

  // ---------------- main process unit ----------------
  logic signed [ACCW-1:0] acc [M_BATCH];

  main_process_unit #(.K(K), .M_BATCH(M_BATCH), .WW(WW), .FW(FW), .IDXW(IDXW),
                      .ACCW(ACCW), .FIFO_DEPTH(FIFO_DEPTH)) u_mpu (
    .clk, .rst_n, .start(mpu_start), .v(win_v), .cnt(lf_cnt),
    .rd_e(lf_rd_e), .rd_value(lf_value), .rd_rel(lf_rel),
    .busy(), .done(mpu_done), .acc
  );

  // ---------------- global output buffer (partial sums) ----------------
  logic signed [ACCW-1:0] ob_rd_data [M_BATCH];
  logic signed [ACCW-1:0] ob_wr_data [M_BATCH];

  always_comb begin
    for (int j = 0; j < M_BATCH; j++)
      ob_wr_data[j] = ob_add_old ? acc[j] + ob_rd_data[j] : acc[j];
  end

  global_output_buffer #(.M_BATCH(M_BATCH), .ACCW(ACCW), .DEPTH(H_MAX * W_MAX)) u_gob (
    .clk, .wr_en(ob_wr_en), .wr_addr(ob_wr_addr), .wr_data(ob_wr_data),
    .rd_en(ob_rd_en), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data)
  );

  // ---------------- NL -> Pool -> output data format ----------------
  logic signed [ACCW-1:0] nl_out   [M_BATCH];
  logic signed [ACCW-1:0] pool_out [M_BATCH];

  nl_unit #(.M_BATCH(M_BATCH), .ACCW(ACCW)) u_nl (
    .relu_en(relu_en), .in_data(ob_rd_data), .out_data(nl_out)
  );

  pool_unit #(.M_BATCH(M_BATCH), .ACCW(ACCW), .TAGW(TAGW)) u_pool (
    .clk, .rst_n, .in_valid(pp_valid), .in_first(pp_first), .in_last(pp_last), .in_tag(pp_tag),
    .in_data(nl_out), .out_valid, .out_tag(out_addr), .out_data(pool_out)
  );

  output_formatter #(.M_BATCH(M_BATCH), .ACCW(ACCW), .FW(FW)) u_fmt (
    .shift(out_shift), .in_data(pool_out), .out_data
  );
endmodule
