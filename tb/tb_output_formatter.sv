// tb_output_formatter: random accumulator values and shifts; checks the
// arithmetic shift and the saturation to the signed 8-bit range, and that
// both saturation directions occur.
module tb_output_formatter;
  localparam int M = 8, ACCW = 32, FW = 8;
  logic [5:0] shift = '0;
  logic signed [ACCW-1:0] in_data [M];
  logic signed [FW-1:0] out_data [M];
  int checks = 0, failures = 0, nhi = 0, nlo = 0;

  output_formatter #(.M_BATCH(M), .ACCW(ACCW), .FW(FW)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int t = 0; t < 300; t++) begin
      shift = 6'($urandom_range(10, 0));
      for (int j = 0; j < M; j++) in_data[j] = ACCW'(int'($urandom_range(100000, 0)) - 50000);
      #1;
      for (int j = 0; j < M; j++) begin
        int e;
        e = int'(in_data[j]) >>> shift;
        if (e > 127) begin e = 127; nhi++; end
        if (e < -128) begin e = -128; nlo++; end
        checks++;
        if (int'(out_data[j]) != e) begin failures++; $display("in %0d sh %0d out %0d exp %0d", in_data[j], shift, out_data[j], e); end
      end
    end
    checks++;
    if (nhi == 0 || nlo == 0) begin failures++; $display("saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
