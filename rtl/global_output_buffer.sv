// global_output_buffer: partial sums of the current filter batch. Word p
// holds the m partial sums of output position p = y*W' + x, one ACCW-bit
// field per filter. Because the stacked-filters flow visits the input
// channels in the outermost loop, each channel's contribution is added to
// the stored word (read, add in the controller, write back) until the last
// channel; afterwards the words are read out for activation and pooling.
// Interface: one write port and one read port; rd_data is valid the cycle
// after rd_en and holds until the next read. Its role between the local
// output registers and the activation stage follows the processor diagram;
// the word organisation is this design's choice.
module global_output_buffer #(
  parameter int unsigned M_BATCH = sfs_pkg::M_BATCH_DEF,
  parameter int unsigned ACCW    = sfs_pkg::ACCW_DEF,
  parameter int unsigned DEPTH   = sfs_pkg::H_MAX_DEF * sfs_pkg::W_MAX_DEF,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic [AW-1:0]          wr_addr,
  input  logic signed [ACCW-1:0] wr_data [M_BATCH],
  input  logic                   rd_en,
  input  logic [AW-1:0]          rd_addr,
  output logic signed [ACCW-1:0] rd_data [M_BATCH]
);
  logic [M_BATCH*ACCW-1:0] mem [DEPTH];
  logic [M_BATCH*ACCW-1:0] wr_word, rd_word;

  always_comb begin
    for (int j = 0; j < M_BATCH; j++) begin
      wr_word[j*ACCW +: ACCW] = wr_data[j];
      rd_data[j] = rd_word[j*ACCW +: ACCW];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_word;
    if (rd_en) rd_word <= mem[rd_addr];
  end
endmodule
