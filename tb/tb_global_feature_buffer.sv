// tb_global_feature_buffer: fills the feature buffer with a known pattern
// through the host port and reads it back through all K ports at once with
// different addresses, checking each port one cycle after the read.
module tb_global_feature_buffer;
  localparam int FW = 8, K = 3, DEPTH = 256;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [7:0] wr_addr = '0;
  logic signed [FW-1:0] wr_data = '0;
  logic [7:0] rd_addr [K];
  logic signed [FW-1:0] rd_data [K];
  int checks = 0, failures = 0;

  global_feature_buffer #(.FW(FW), .K(K), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [7:0] pat(int a); return 8'((a * 37 + 11) ^ (a >> 3)); endfunction

  initial begin
    for (int r = 0; r < K; r++) rd_addr[r] = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 8'(a); wr_data = pat(a);
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 100; t++) begin
      int a [K];
      for (int r = 0; r < K; r++) begin a[r] = int'($urandom_range(DEPTH - 1, 0)); rd_addr[r] = 8'(a[r]); end
      rd_en = 1;
      @(negedge clk); rd_en = 0;
      for (int r = 0; r < K; r++) begin
        checks++;
        if (rd_data[r] != pat(a[r])) begin failures++; $display("port %0d addr %0d got %h", r, a[r], rd_data[r]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
