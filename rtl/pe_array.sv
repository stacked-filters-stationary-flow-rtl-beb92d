// pe_array: the multiplier lane behind one computation FIFO. Every cycle in
// which its FIFO offers an entry, the lane pops it and multiplies the weight
// by the window element; one clock later the product appears on
// out_valid/out_prod together with the filter index out_j, which tells the
// local output registers where to add it. The lane is always ready, so a
// FIFO entry is consumed every cycle. One multiplier per lane and the single
// register stage are this design's choices; the diagram only names the lane
// "PE Array".
module pe_array #(
  parameter int unsigned WW   = sfs_pkg::WW_DEF,
  parameter int unsigned FW   = sfs_pkg::FW_DEF,
  parameter int unsigned JW   = 4,
  localparam int unsigned PRW = WW + FW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [WW-1:0]  in_w,
  input  logic signed [FW-1:0]  in_v,
  input  logic [JW-1:0]         in_j,
  output logic                  out_valid,
  output logic [JW-1:0]         out_j,
  output logic signed [PRW-1:0] out_prod
);
  assign in_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_j     <= '0;
      out_prod  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_j    <= in_j;
        out_prod <= PRW'(in_w) * PRW'(in_v);
      end
    end
  end
endmodule
