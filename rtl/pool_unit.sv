// pool_unit: max pooling of the m channels of a group of output positions.
// The positions of one pooling window arrive one per cycle with in_valid;
// in_first marks the first of the window and in_last the last. The running
// per-channel maximum is kept in a register, and one cycle after in_last,
// out_valid rises for one cycle with the maxima and the window's tag (the
// tag given with in_last, used as the output address). A window of one
// position (in_first and in_last together) passes the value through, which
// is how pooling is bypassed. The stage's place follows the processor
// diagram, which only labels it "Pool"; max pooling is this design's choice.
module pool_unit #(
  parameter int unsigned M_BATCH = sfs_pkg::M_BATCH_DEF,
  parameter int unsigned ACCW    = sfs_pkg::ACCW_DEF,
  parameter int unsigned TAGW    = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic [TAGW-1:0]        in_tag,
  input  logic signed [ACCW-1:0] in_data  [M_BATCH],
  output logic                   out_valid,
  output logic [TAGW-1:0]        out_tag,
  output logic signed [ACCW-1:0] out_data [M_BATCH]
);
  logic signed [ACCW-1:0] max_q [M_BATCH];
  logic signed [ACCW-1:0] max_n [M_BATCH];

  always_comb begin
    for (int j = 0; j < M_BATCH; j++)
      max_n[j] = (in_first || in_data[j] > max_q[j]) ? in_data[j] : max_q[j];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int j = 0; j < M_BATCH; j++) begin
        max_q[j]    <= '0;
        out_data[j] <= '0;
      end
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        for (int j = 0; j < M_BATCH; j++) max_q[j] <= max_n[j];
        if (in_last) begin
          out_tag <= in_tag;
          for (int j = 0; j < M_BATCH; j++) out_data[j] <= max_n[j];
        end
      end
    end
  end
endmodule
