// line_buffer: K feature rows of one input channel, W_MAX values each.
// When shift_en is high the whole buffer moves one column to the left and
// the K-value column col_in enters at the right end (column W_MAX-1). After
// W_MAX shifts the buffer holds K complete rows; the window registers always
// take the leftmost K columns, so stepping the window by the stride S means
// S further shifts. Row r of col_in is row r of the buffer (r = 0 is the top
// row). A row narrower than W_MAX is loaded as its W columns followed by
// W_MAX-W columns of zero padding, which leaves column x = 0 leftmost.
// The K-row buffer and its left-moving direction follow the processor
// diagram; the shift-register implementation is this design's choice.
module line_buffer #(
  parameter int unsigned FW    = sfs_pkg::FW_DEF,
  parameter int unsigned K     = sfs_pkg::K_DEF,
  parameter int unsigned W_MAX = sfs_pkg::W_MAX_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 shift_en,
  input  logic signed [FW-1:0] col_in  [K],
  output logic signed [FW-1:0] win_cols [K][K]  // [row][col], leftmost K columns
);
  logic signed [FW-1:0] buf_q [K][W_MAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < K; r++)
        for (int x = 0; x < W_MAX; x++) buf_q[r][x] <= '0;
    end else if (shift_en) begin
      for (int r = 0; r < K; r++) begin
        for (int x = 0; x < W_MAX - 1; x++) buf_q[r][x] <= buf_q[r][x+1];
        buf_q[r][W_MAX-1] <= col_in[r];
      end
    end
  end

  always_comb begin
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) win_cols[r][c] = buf_q[r][c];
  end
endmodule
