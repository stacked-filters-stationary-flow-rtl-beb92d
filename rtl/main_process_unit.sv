// main_process_unit: computes the m outputs of one output position from one
// input channel. There are K*K lanes, one per window element. On start,
// lane k begins to walk column k of the local filter buffer: each cycle it
// reads entry e, turns the relative filter index into an absolute one
// (j = previous j + 1 + rel, previous j = -1 at the column start) and pushes
// (weight, window element k, j) into its computation FIFO. Its PE array pops
// the FIFO, multiplies, and the product is added to local output register j.
// Only the kept entries (nonzeros and padding zeros) are visited, so zero
// weights cost no cycles. The position is finished when every lane has
// walked its column and all FIFOs and multipliers are empty: done pulses for
// one cycle and acc then holds sum over k of W[j][k] * V[k] for every j.
// Timing: with L = the largest column count, done comes L+3 cycles after
// start (L = 0: 1 cycle). v and cnt must stay stable from start to done;
// acc is cleared by start and stays valid until the next start.
// The lane structure follows the processor diagram and the pseudo code of
// the stacked-filters flow; starting all lanes together per output position
// is this design's choice.
module main_process_unit #(
  parameter int unsigned K          = sfs_pkg::K_DEF,
  parameter int unsigned M_BATCH    = sfs_pkg::M_BATCH_DEF,
  parameter int unsigned WW         = sfs_pkg::WW_DEF,
  parameter int unsigned FW         = sfs_pkg::FW_DEF,
  parameter int unsigned IDXW       = sfs_pkg::IDXW_DEF,
  parameter int unsigned ACCW       = sfs_pkg::ACCW_DEF,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned NLANE     = K * K,
  localparam int unsigned EW        = $clog2(M_BATCH),
  localparam int unsigned CW        = $clog2(M_BATCH + 1),
  localparam int unsigned JW        = $clog2(M_BATCH),
  localparam int unsigned PRW       = WW + FW
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic signed [FW-1:0]   v        [NLANE],
  input  logic [CW-1:0]          cnt      [NLANE],
  output logic [EW-1:0]          rd_e     [NLANE],
  input  logic signed [WW-1:0]   rd_value [NLANE],
  input  logic [IDXW-1:0]        rd_rel   [NLANE],
  output logic                   busy,
  output logic                   done,
  output logic signed [ACCW-1:0] acc      [M_BATCH]
);
  localparam int unsigned DW = WW + FW + JW;

  logic               active_q [NLANE];
  logic [CW-1:0]      e_q      [NLANE];
  logic signed [JW:0] jprev_q  [NLANE];
  logic               busy_q;

  logic               f_in_valid [NLANE], f_in_ready [NLANE];
  logic [DW-1:0]      f_in_data  [NLANE], f_out_data [NLANE];
  logic               f_out_valid[NLANE], f_out_ready[NLANE];
  logic               p_valid [NLANE];
  logic [JW-1:0]      p_j     [NLANE];
  logic signed [PRW-1:0] p_prod [NLANE];
  logic signed [JW:0] jcur [NLANE];

  for (genvar k = 0; k < NLANE; k++) begin : g_lane
    assign rd_e[k]       = e_q[k][EW-1:0];
    assign jcur[k]       = jprev_q[k] + (JW+1)'(1) + (JW+1)'(rd_rel[k]);
    assign f_in_valid[k] = active_q[k];
    assign f_in_data[k]  = {rd_value[k], v[k], jcur[k][JW-1:0]};

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        active_q[k] <= 1'b0;
        e_q[k]      <= '0;
        jprev_q[k]  <= '1;
      end else if (start) begin
        active_q[k] <= (cnt[k] != '0);
        e_q[k]      <= '0;
        jprev_q[k]  <= '1;
      end else if (active_q[k] && f_in_ready[k]) begin
        e_q[k]      <= e_q[k] + CW'(1);
        jprev_q[k]  <= jcur[k];
        if (e_q[k] + CW'(1) == cnt[k]) active_q[k] <= 1'b0;
      end
    end

    computation_fifo #(.DW(DW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .flush(start),
      .in_valid(f_in_valid[k]), .in_ready(f_in_ready[k]), .in_data(f_in_data[k]),
      .out_valid(f_out_valid[k]), .out_ready(f_out_ready[k]), .out_data(f_out_data[k])
    );

    pe_array #(.WW(WW), .FW(FW), .JW(JW)) u_pe (
      .clk, .rst_n,
      .in_valid(f_out_valid[k]), .in_ready(f_out_ready[k]),
      .in_w(f_out_data[k][DW-1 -: WW]), .in_v(f_out_data[k][JW +: FW]), .in_j(f_out_data[k][JW-1:0]),
      .out_valid(p_valid[k]), .out_j(p_j[k]), .out_prod(p_prod[k])
    );
  end

  local_output_registers #(.NLANE(NLANE), .M_BATCH(M_BATCH), .PRW(PRW), .ACCW(ACCW)) u_lor (
    .clk, .rst_n, .clear(start), .in_valid(p_valid), .in_j(p_j), .in_prod(p_prod), .acc
  );

  logic idle;
  always_comb begin
    idle = 1'b1;
    for (int k = 0; k < NLANE; k++)
      if (active_q[k] || f_out_valid[k] || p_valid[k]) idle = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     busy_q <= 1'b0;
    else if (start) busy_q <= 1'b1;
    else if (idle)  busy_q <= 1'b0;
  end

  assign busy = busy_q;
  assign done = busy_q && idle && !start;

  a_start_when_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy_q || idle);
endmodule
