// tb_global_output_buffer: writes m-value words at random addresses,
// performs a read-modify-write accumulation like the controller does, and
// checks the read data one cycle after rd_en and that it holds afterwards.
module tb_global_output_buffer;
  localparam int M = 4, ACCW = 32, DEPTH = 32, AW = 5;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic signed [ACCW-1:0] wr_data [M];
  logic signed [ACCW-1:0] rd_data [M];
  int checks = 0, failures = 0;
  int model [DEPTH][M];

  global_output_buffer #(.M_BATCH(M), .ACCW(ACCW), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(a);
      for (int j = 0; j < M; j++) begin model[a][j] = a * 10 + j; wr_data[j] = ACCW'(model[a][j]); end
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      int a, d [M];
      a = int'($urandom_range(DEPTH - 1, 0));
      @(negedge clk); rd_en = 1; rd_addr = AW'(a);
      @(negedge clk); rd_en = 0; rd_addr = AW'(a + 1);
      @(negedge clk);
      for (int j = 0; j < M; j++) begin
        checks++;
        if (int'(rd_data[j]) != model[a][j]) begin failures++; $display("addr %0d ch %0d", a, j); end
        d[j] = int'($urandom_range(2000, 0)) - 1000;
        wr_data[j] = rd_data[j] + ACCW'(d[j]);
        model[a][j] += d[j];
      end
      wr_en = 1; wr_addr = AW'(a);
      @(negedge clk); wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
