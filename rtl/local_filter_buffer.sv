// local_filter_buffer: the compressed weights of the m filters of one input
// channel, arranged per kernel position so that all K*K positions can be
// read in parallel, one per PE lane.
// Loading: after clear, the CSF stream of the channel enters one entry per
// cycle (in_valid, in_value, in_rel). The running position in the
// uncompressed column-by-column layout is pos = previous pos + 1 + in_rel
// (starting from -1); column = pos div m is the kernel position and
// j = pos mod m the filter. The entry is appended to that column's list with
// a relative filter index re-based to the column (distance from the previous
// entry of the same column, or from filter 0 for the first one), and the
// column's entry count grows by one. The counts play the part of the
// relative column pointers: entry count of column k = pointer of column k+1.
// An entry whose position falls past the last column is dropped and sets
// the sticky overflow flag.
// Reading: lane k presents an entry number rd_e[k] and sees that entry of
// column k combinationally; cnt[k] is the number of entries in column k.
// The per-column split, counts and relative indices follow the CSF layout;
// re-basing the index at a column start and the overflow flag are this
// design's choices.
module local_filter_buffer #(
  parameter int unsigned K       = sfs_pkg::K_DEF,
  parameter int unsigned M_BATCH = sfs_pkg::M_BATCH_DEF,
  parameter int unsigned WW      = sfs_pkg::WW_DEF,
  parameter int unsigned IDXW    = sfs_pkg::IDXW_DEF,
  localparam int unsigned NCOL   = K * K,
  localparam int unsigned EW     = $clog2(M_BATCH),      // entry number width
  localparam int unsigned CW     = $clog2(M_BATCH + 1),  // count width
  localparam int unsigned PW     = $clog2(NCOL * M_BATCH + (1 << IDXW) + 1) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic signed [WW-1:0] in_value,
  input  logic [IDXW-1:0]      in_rel,
  input  logic [EW-1:0]        rd_e   [NCOL],
  output logic signed [WW-1:0] rd_value [NCOL],
  output logic [IDXW-1:0]      rd_rel [NCOL],
  output logic [CW-1:0]        cnt    [NCOL],
  output logic                 overflow
);
  logic signed [WW-1:0] val_q  [NCOL][M_BATCH];
  logic [IDXW-1:0]      rel_q  [NCOL][M_BATCH];
  logic [CW-1:0]        cnt_q  [NCOL];
  logic [EW-1:0]        lastj_q[NCOL];
  logic signed [PW-1:0] pos_q;   // position of the last entry, -1 after clear
  logic                 ovf_q;

  logic signed [PW-1:0] pos_n;
  int unsigned          col_n, j_n;
  logic [IDXW-1:0]      lrel_n;

  always_comb begin
    pos_n = pos_q + PW'(1) + PW'(in_rel);
    col_n = unsigned'(int'(pos_n)) / M_BATCH;
    j_n   = unsigned'(int'(pos_n)) % M_BATCH;
    lrel_n = '0;
    if (col_n < NCOL) begin
      if (cnt_q[col_n] == '0) lrel_n = IDXW'(j_n);
      else                    lrel_n = IDXW'(j_n - int'(lastj_q[col_n]) - 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos_q <= '1;
      ovf_q <= 1'b0;
      for (int k = 0; k < NCOL; k++) begin
        cnt_q[k]   <= '0;
        lastj_q[k] <= '0;
      end
    end else if (clear) begin
      pos_q <= '1;
      ovf_q <= 1'b0;
      for (int k = 0; k < NCOL; k++) begin
        cnt_q[k]   <= '0;
        lastj_q[k] <= '0;
      end
    end else if (in_valid) begin
      pos_q <= pos_n;
      if (col_n < NCOL) begin
        cnt_q[col_n]   <= cnt_q[col_n] + CW'(1);
        lastj_q[col_n] <= EW'(j_n);
      end else begin
        ovf_q <= 1'b1;
      end
    end
  end

  // entry storage: no reset needed, entries beyond cnt are never read
  always_ff @(posedge clk) begin
    if (!clear && in_valid && col_n < NCOL) begin
      val_q[col_n][cnt_q[col_n][EW-1:0]] <= in_value;
      rel_q[col_n][cnt_q[col_n][EW-1:0]] <= lrel_n;
    end
  end

  always_comb begin
    for (int k = 0; k < NCOL; k++) begin
      rd_value[k] = val_q[k][rd_e[k]];
      rd_rel[k]   = rel_q[k][rd_e[k]];
      cnt[k]      = cnt_q[k];
    end
  end
  assign overflow = ovf_q;
endmodule
