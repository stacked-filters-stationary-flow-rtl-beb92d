// local_output_registers: m accumulators, one per filter of the batch, for
// the output position currently being computed. Every cycle, register j adds
// the sum of all lane products whose filter index equals j (several lanes may
// hit the same filter in one cycle, so each register has its own adder over
// the NLANE lanes). clear zeroes all registers; if clear and a product come
// in the same cycle the product is dropped. acc is the register contents.
// The per-filter registers-and-adders row follows the processor diagram; the
// diagram's several "output feature offset" rows are reduced to one row here
// (one output position at a time), which is this design's choice.
module local_output_registers #(
  parameter int unsigned NLANE   = sfs_pkg::K_DEF * sfs_pkg::K_DEF,
  parameter int unsigned M_BATCH = sfs_pkg::M_BATCH_DEF,
  parameter int unsigned PRW     = sfs_pkg::WW_DEF + sfs_pkg::FW_DEF,
  parameter int unsigned ACCW    = sfs_pkg::ACCW_DEF,
  localparam int unsigned JW     = $clog2(M_BATCH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid [NLANE],
  input  logic [JW-1:0]          in_j     [NLANE],
  input  logic signed [PRW-1:0]  in_prod  [NLANE],
  output logic signed [ACCW-1:0] acc      [M_BATCH]
);
  logic signed [ACCW-1:0] sum [M_BATCH];

  always_comb begin
    for (int j = 0; j < M_BATCH; j++) begin
      sum[j] = '0;
      for (int k = 0; k < NLANE; k++)
        if (in_valid[k] && in_j[k] == JW'(j)) sum[j] = sum[j] + ACCW'(in_prod[k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < M_BATCH; j++) acc[j] <= '0;
    end else if (clear) begin
      for (int j = 0; j < M_BATCH; j++) acc[j] <= '0;
    end else begin
      for (int j = 0; j < M_BATCH; j++) acc[j] <= acc[j] + sum[j];
    end
  end
endmodule
