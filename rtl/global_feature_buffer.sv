// global_feature_buffer: on-chip store of the input feature map V_i[C][H][W]
// of one layer, filled from external RAM through a host write port.
// It has K read ports so that one column of K vertically adjacent values
// (rows S*y .. S*y+K-1 at one x) can be handed to the line buffer per cycle.
// The word address of V_i[chi][row][x] is (chi*H + row)*W + x, computed by
// the controller. Interface: one write port (wr_en/wr_addr/wr_data), K read
// addresses sampled when rd_en is high; rd_data is valid the next cycle.
// The buffer's existence and place follow the processor diagram; its size,
// organisation and port count are this design's choices.
module global_feature_buffer #(
  parameter int unsigned FW    = sfs_pkg::FW_DEF,
  parameter int unsigned K     = sfs_pkg::K_DEF,
  parameter int unsigned DEPTH = sfs_pkg::C_MAX_DEF * sfs_pkg::H_MAX_DEF * sfs_pkg::W_MAX_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic signed [FW-1:0] wr_data,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr [K],
  output logic signed [FW-1:0] rd_data [K]
);
  logic signed [FW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  for (genvar r = 0; r < K; r++) begin : g_rd
    always_ff @(posedge clk) begin
      if (rd_en) rd_data[r] <= mem[rd_addr[r]];
    end
  end
endmodule
