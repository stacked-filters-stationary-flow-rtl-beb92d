// computation_fifo: synchronous FIFO of pending multiplications for one PE
// lane. Each entry is one weight of the lane's filter column, the window
// element it multiplies and the absolute filter index that selects the
// output register. Valid/ready on both sides; a push and a pop may happen in
// the same cycle, also when full. DEPTH must be a power of two. One FIFO per
// window position follows the processor diagram; depth and handshake are
// this design's choices.
module computation_fifo #(
  parameter int unsigned DW    = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);
  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wp, rp;
  logic          full, empty, push, pop;

  assign empty     = (wp == rp);
  assign full      = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign out_valid = !empty;
  assign in_ready  = !full || out_ready;
  assign pop       = out_valid && out_ready;
  assign push      = in_valid && in_ready;
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (flush) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push && !flush) mem[wp[AW-1:0]] <= in_data;
  end

  // occupancy never exceeds DEPTH
  a_occupancy: assert property (@(posedge clk) disable iff (!rst_n) (wp - rp) <= (AW+1)'(DEPTH));
endmodule
