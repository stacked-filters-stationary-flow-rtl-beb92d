// output_formatter: converts the m accumulator-width results of one output
// position to the FW-bit feature format in which the next layer reads them:
// an arithmetic right shift by shift (a per-layer fixed-point scale),
// followed by saturation to the signed FW-bit range. Combinational. The
// stage's place follows the processor diagram ("Output data format"); the
// shift-and-saturate rule is this design's choice.
module output_formatter #(
  parameter int unsigned M_BATCH = sfs_pkg::M_BATCH_DEF,
  parameter int unsigned ACCW    = sfs_pkg::ACCW_DEF,
  parameter int unsigned FW      = sfs_pkg::FW_DEF
) (
  input  logic [5:0]             shift,
  input  logic signed [ACCW-1:0] in_data  [M_BATCH],
  output logic signed [FW-1:0]   out_data [M_BATCH]
);
  localparam logic signed [ACCW-1:0] MAXV = ACCW'((1 << (FW-1)) - 1);
  localparam logic signed [ACCW-1:0] MINV = -ACCW'(1 << (FW-1));
  logic signed [ACCW-1:0] sh [M_BATCH];

  always_comb begin
    for (int j = 0; j < M_BATCH; j++) begin
      sh[j] = in_data[j] >>> shift;
      if (sh[j] > MAXV)      out_data[j] = MAXV[FW-1:0];
      else if (sh[j] < MINV) out_data[j] = MINV[FW-1:0];
      else                   out_data[j] = sh[j][FW-1:0];
    end
  end
endmodule
