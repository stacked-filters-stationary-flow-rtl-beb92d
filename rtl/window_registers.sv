// window_registers: the K x K convolution window of one input channel.
// On load the leftmost K columns of the line buffer are copied in; the
// window is then held steady while the main process unit works on it, so the
// line buffer may already shift on. Output v holds the window flattened in
// the order V11, V12, .., V1K, V21, .., VKK (index r*K + c), which is also the
// lane number of the PE array that consumes the element. Load takes effect
// at the next clock edge. The flattened order is the one printed in the
// processor diagram; the hold-while-computing behaviour is this design's.
module window_registers #(
  parameter int unsigned FW = sfs_pkg::FW_DEF,
  parameter int unsigned K  = sfs_pkg::K_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic signed [FW-1:0] win_in [K][K],
  output logic signed [FW-1:0] v      [K*K]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < K*K; i++) v[i] <= '0;
    end else if (load) begin
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) v[r*K+c] <= win_in[r][c];
    end
  end
endmodule
