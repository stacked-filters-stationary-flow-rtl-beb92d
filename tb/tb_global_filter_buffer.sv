// tb_global_filter_buffer: writes CSF entries and the stream start table,
// then reads them back (entries one cycle after rd_en, the table
// combinationally).
module tb_global_filter_buffer;
  localparam int WW = 8, IDXW = 3, DEPTH = 64, NSTREAM = 8;
  localparam int AW = $clog2(DEPTH + 1), TW = $clog2(NSTREAM + 1);
  logic clk = 0, wr_en = 0, tbl_wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, tbl_wr_addr = '0, tbl_rd_addr, rd_addr = '0;
  logic signed [WW-1:0] wr_value = '0, rd_value;
  logic [IDXW-1:0] wr_rel = '0, rd_rel;
  logic [TW-1:0] tbl_wr_idx = '0, tbl_rd_idx = '0;
  int checks = 0, failures = 0;

  global_filter_buffer #(.WW(WW), .IDXW(IDXW), .DEPTH(DEPTH), .NSTREAM(NSTREAM)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(a); wr_value = WW'(a * 5 - 100); wr_rel = IDXW'(a % 7);
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t <= NSTREAM; t++) begin
      @(negedge clk); tbl_wr_en = 1; tbl_wr_idx = TW'(t); tbl_wr_addr = AW'(t * 7);
    end
    @(negedge clk); tbl_wr_en = 0;
    for (int t = 0; t <= NSTREAM; t++) begin
      tbl_rd_idx = TW'(NSTREAM - t); #1;
      checks++;
      if (tbl_rd_addr != AW'((NSTREAM - t) * 7)) begin failures++; $display("table %0d", NSTREAM - t); end
    end
    for (int a = DEPTH - 1; a >= 0; a -= 3) begin
      @(negedge clk); rd_en = 1; rd_addr = AW'(a);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_value != WW'(a * 5 - 100) || rd_rel != IDXW'(a % 7)) begin failures++; $display("entry %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
