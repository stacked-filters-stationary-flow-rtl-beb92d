// global_filter_buffer: on-chip store of the compressed filters of a layer.
// Filters are grouped into batches of m; the weights of one batch and one
// input channel form a stream in the relative-indexed CSF format: the K*K*m
// weights are listed column by column (all m filters of kernel position 11,
// then of 12, ..), zeros are dropped, and each kept value carries a relative
// index = number of dropped zeros since the previous kept value. Runs of
// zeros longer than the index can express are broken by padding entries
// (value 0). No column pointers are stored: the reader recovers them from
// the running position. A second table, start[t], gives the first entry of
// stream t = n*C + chi; stream t ends where stream t+1 starts.
// Interface: host write ports for entries and for the start table; one
// registered entry read port and one combinational start-table read port.
// The stream format follows the CSF description; the start table is this
// design's own way of locating a channel's stream.
module global_filter_buffer #(
  parameter int unsigned WW     = sfs_pkg::WW_DEF,
  parameter int unsigned IDXW   = sfs_pkg::IDXW_DEF,
  parameter int unsigned DEPTH  = sfs_pkg::FILT_DEPTH_DEF,
  parameter int unsigned NSTREAM = sfs_pkg::NB_MAX_DEF * sfs_pkg::C_MAX_DEF,
  localparam int unsigned AW    = $clog2(DEPTH + 1),
  localparam int unsigned TW    = $clog2(NSTREAM + 1)
) (
  input  logic                  clk,
  // entry write (from RAM side)
  input  logic                  wr_en,
  input  logic [AW-1:0]         wr_addr,
  input  logic signed [WW-1:0]  wr_value,
  input  logic [IDXW-1:0]       wr_rel,
  // start table write: entry NSTREAM marks the end of the last stream
  input  logic                  tbl_wr_en,
  input  logic [TW-1:0]         tbl_wr_idx,
  input  logic [AW-1:0]         tbl_wr_addr,
  // start table read
  input  logic [TW-1:0]         tbl_rd_idx,
  output logic [AW-1:0]         tbl_rd_addr,
  // entry read, data valid one cycle after rd_en
  input  logic                  rd_en,
  input  logic [AW-1:0]         rd_addr,
  output logic signed [WW-1:0]  rd_value,
  output logic [IDXW-1:0]       rd_rel
);
  logic [WW+IDXW-1:0] mem [DEPTH];
  logic [AW-1:0]      tbl [NSTREAM+1];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr[$clog2(DEPTH)-1:0]] <= {wr_value, wr_rel};
    if (tbl_wr_en) tbl[tbl_wr_idx] <= tbl_wr_addr;
  end

  always_ff @(posedge clk) begin
    if (rd_en) {rd_value, rd_rel} <= mem[rd_addr[$clog2(DEPTH)-1:0]];
  end

  assign tbl_rd_addr = tbl[tbl_rd_idx];
endmodule
