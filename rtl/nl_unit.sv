// nl_unit: the nonlinear stage between the output buffer and pooling,
// applied to the m values of one output position at once. With relu_en set
// it is a ReLU (negative values become 0), otherwise values pass unchanged.
// Purely combinational. The stage's place follows the processor diagram,
// which only labels it "NL"; choosing ReLU is this design's choice.
module nl_unit #(
  parameter int unsigned M_BATCH = sfs_pkg::M_BATCH_DEF,
  parameter int unsigned ACCW    = sfs_pkg::ACCW_DEF
) (
  input  logic                   relu_en,
  input  logic signed [ACCW-1:0] in_data  [M_BATCH],
  output logic signed [ACCW-1:0] out_data [M_BATCH]
);
  always_comb begin
    for (int j = 0; j < M_BATCH; j++)
      out_data[j] = (relu_en && in_data[j] < 0) ? '0 : in_data[j];
  end
endmodule
