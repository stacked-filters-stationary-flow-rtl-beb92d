// center_controller: sequences one layer in the stacked-filters-stationary
// order. For each filter batch n (M' batches of m filters) and each input
// channel chi it
//   1. clears the local filter buffer and streams the CSF entries of stream
//      n*C+chi from the global filter buffer into it (one entry per cycle),
//   2. for each output row y loads input rows S*y .. S*y+K-1 of channel chi
//      into the line buffer, one K-value column per cycle, W_MAX columns,
//      zero padded past W,
//   3. for each output column x copies the window into the window
//      registers, starts the main process unit and, while it works, reads
//      the stored partial sums of position y*W'+x; on done it writes back
//      partial sum + new sums (channel 0 writes the new sums alone), then
//      shifts the line buffer S columns on.
// After the last channel of a batch it reads the output buffer in pooling
// order (2x2 windows when pool_en, single positions otherwise) and feeds the
// NL, pool and format stages, which emit one m-value output word per
// (pooled) position at address n*HP*WP + py*WP + px. done pulses when the
// layer is finished. Layer shape comes from cfg, sampled at start.
// The loop order follows the stacked-filters pseudo code (channel outside,
// the m filters of a batch in parallel); states, handshakes and the partial
// sum read-modify-write schedule are this design's choices.
module center_controller
  import sfs_pkg::*;
#(
  parameter int unsigned K        = sfs_pkg::K_DEF,
  parameter int unsigned W_MAX    = sfs_pkg::W_MAX_DEF,
  parameter int unsigned FEAT_AW  = sfs_pkg::FEAT_AW_DEF,
  parameter int unsigned FILT_AW  = sfs_pkg::FILT_AW_DEF,
  parameter int unsigned TBL_AW   = sfs_pkg::TBL_AW_DEF,
  parameter int unsigned OUT_AW   = sfs_pkg::OUT_AW_DEF,
  parameter int unsigned TAGW     = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  layer_cfg_t           cfg,
  output logic                 busy,
  output logic                 done,
  // global filter buffer
  output logic [TBL_AW-1:0]    tbl_rd_idx,
  input  logic [FILT_AW-1:0]   tbl_rd_addr,
  output logic                 filt_rd_en,
  output logic [FILT_AW-1:0]   filt_rd_addr,
  // local filter buffer
  output logic                 lfb_clear,
  output logic                 lfb_in_valid,
  // global feature buffer and line buffer
  output logic                 feat_rd_en,
  output logic [FEAT_AW-1:0]   feat_rd_addr [K],
  output logic                 lb_shift,
  output logic                 lb_zero,      // column entering the line buffer is padding
  // window registers and main process unit
  output logic                 win_load,
  output logic                 mpu_start,
  input  logic                 mpu_done,
  // global output buffer
  output logic                 ob_rd_en,
  output logic [OUT_AW-1:0]    ob_rd_addr,
  output logic                 ob_wr_en,
  output logic [OUT_AW-1:0]    ob_wr_addr,
  output logic                 ob_add_old,   // write = old partial sum + new sums
  // post-processing (aligned with ob read data, one cycle after ob_rd_en)
  output logic                 pp_valid,
  output logic                 pp_first,
  output logic                 pp_last,
  output logic [TAGW-1:0]      pp_tag,
  output logic                 relu_en,      // sampled layer settings for the
  output logic [5:0]           out_shift     // NL and output format stages
);
  typedef enum logic [3:0] {
    S_IDLE, S_TBL0, S_TBL1, S_LF, S_LF_WAIT, S_ROW, S_ROW_WAIT, S_WIN, S_MPU,
    S_WAIT, S_WB, S_SHIFT, S_POST, S_DRAIN, S_DONE
  } state_t;
  state_t st;

  layer_cfg_t cf;
  logic [7:0]  wo, ho, wp, hp, n, y, x, xl, sh, py, px;
  logic [9:0]  chi;
  logic [1:0]  dxy;      // position inside the 2x2 pooling window: {dy,dx}
  logic [2:0]  drain;
  logic [FILT_AW-1:0] fptr, fend;
  logic        rd_q, rd_pad_q;
  logic [TAGW-1:0] pbase;

  // output size W' = (W-K)/S+1, H' = (H-K)/S+1
  always_comb begin
    wo = 8'((int'(cf.w) - int'(K)) / int'(cf.s) + 1);
    ho = 8'((int'(cf.h) - int'(K)) / int'(cf.s) + 1);
    wp = cf.pool_en ? (wo >> 1) : wo;
    hp = cf.pool_en ? (ho >> 1) : ho;
  end

  // feature addresses of the column being loaded: (chi*H + S*y + r)*W + xl
  for (genvar r = 0; r < K; r++) begin : g_fa
    assign feat_rd_addr[r] = FEAT_AW'(((int'(chi) * int'(cf.h) + int'(cf.s) * int'(y) + r)
                                       * int'(cf.w)) + int'(xl));
  end

  assign tbl_rd_idx   = (st == S_TBL0) ? TBL_AW'(int'(n) * int'(cf.c) + int'(chi))
                                       : TBL_AW'(int'(n) * int'(cf.c) + int'(chi) + 1);
  assign filt_rd_en   = (st == S_LF) && (fptr != fend);
  assign filt_rd_addr = fptr;
  assign lfb_clear    = (st == S_TBL0);
  assign lfb_in_valid = rd_q && (st == S_LF || st == S_LF_WAIT);
  assign feat_rd_en   = (st == S_ROW) && (xl < cf.w);
  assign lb_shift     = (rd_q && (st == S_ROW || st == S_ROW_WAIT)) || (st == S_SHIFT);
  assign lb_zero      = (st == S_SHIFT) || rd_pad_q;
  assign win_load     = (st == S_WIN);
  assign mpu_start    = (st == S_MPU);
  assign ob_add_old   = (chi != 10'd0);
  assign ob_wr_en     = (st == S_WB);
  assign ob_wr_addr   = OUT_AW'(int'(y) * int'(wo) + int'(x));
  assign busy         = (st != S_IDLE);
  assign relu_en      = cf.relu_en;
  assign out_shift    = cf.out_shift;

  always_comb begin
    ob_rd_en   = 1'b0;
    ob_rd_addr = OUT_AW'(int'(y) * int'(wo) + int'(x));
    if (st == S_MPU) ob_rd_en = 1'b1;
    if (st == S_POST) begin
      ob_rd_en = 1'b1;
      if (cf.pool_en)
        ob_rd_addr = OUT_AW'((2 * int'(py) + int'(dxy[1])) * int'(wo) + 2 * int'(px) + int'(dxy[0]));
      else
        ob_rd_addr = OUT_AW'(int'(py) * int'(wo) + int'(px));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cf <= '0; done <= 1'b0;
      n <= '0; chi <= '0; y <= '0; x <= '0; xl <= '0; sh <= '0; py <= '0; px <= '0;
      dxy <= '0; drain <= '0; fptr <= '0; fend <= '0; rd_q <= 1'b0; rd_pad_q <= 1'b0;
      pp_valid <= 1'b0; pp_first <= 1'b0; pp_last <= 1'b0; pp_tag <= '0; pbase <= '0;
    end else begin
      done     <= 1'b0;
      rd_q     <= 1'b0;
      rd_pad_q <= 1'b0;
      pp_valid <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          cf <= cfg; n <= '0; chi <= '0; pbase <= '0;
          st <= S_TBL0;
        end
        S_TBL0: begin fptr <= tbl_rd_addr; st <= S_TBL1; end
        S_TBL1: begin fend <= tbl_rd_addr; st <= S_LF; end
        S_LF: begin
          if (fptr != fend) begin
            fptr <= fptr + 1'b1;
            rd_q <= 1'b1;
          end else st <= S_LF_WAIT;
        end
        S_LF_WAIT: begin y <= '0; xl <= '0; st <= S_ROW; end
        S_ROW: begin
          rd_q     <= 1'b1;
          rd_pad_q <= (xl >= cf.w);
          if (xl == 8'(W_MAX - 1)) st <= S_ROW_WAIT;
          else xl <= xl + 1'b1;
        end
        S_ROW_WAIT: begin x <= '0; st <= S_WIN; end
        S_WIN: st <= S_MPU;
        S_MPU: st <= S_WAIT;
        S_WAIT: if (mpu_done) st <= S_WB;
        S_WB: begin
          if (x + 1'b1 < wo) begin
            x <= x + 1'b1; sh <= {4'd0, cf.s} - 8'd1; st <= S_SHIFT;
          end else if (y + 1'b1 < ho) begin
            y <= y + 1'b1; xl <= '0; st <= S_ROW;
          end else if (chi + 1'b1 < cf.c) begin
            chi <= chi + 1'b1; st <= S_TBL0;
          end else begin
            py <= '0; px <= '0; dxy <= '0; st <= S_POST;
          end
        end
        S_SHIFT: begin
          if (sh == 8'd0) st <= S_WIN;
          else sh <= sh - 1'b1;
        end
        S_POST: begin
          pp_valid <= 1'b1;
          pp_first <= !cf.pool_en || (dxy == 2'd0);
          pp_last  <= !cf.pool_en || (dxy == 2'd3);
          pp_tag   <= pbase + TAGW'(int'(py) * int'(wp) + int'(px));
          if (cf.pool_en && dxy != 2'd3) dxy <= dxy + 1'b1;
          else begin
            dxy <= '0;
            if (px + 1'b1 < wp) px <= px + 1'b1;
            else begin
              px <= '0;
              if (py + 1'b1 < hp) py <= py + 1'b1;
              else begin drain <= '0; st <= S_DRAIN; end
            end
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd3) begin
            if (n + 1'b1 < {2'd0, cf.nb}) begin
              n <= n + 1'b1; chi <= '0;
              pbase <= pbase + TAGW'(int'(hp) * int'(wp));
              st <= S_TBL0;
            end else st <= S_DONE;
          end
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_mpu_done_expected: assert property (@(posedge clk) disable iff (!rst_n) mpu_done |-> st == S_WAIT);
endmodule
