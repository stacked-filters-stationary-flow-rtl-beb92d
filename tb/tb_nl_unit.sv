// tb_nl_unit: random signed values through the NL stage with ReLU on and
// off.
module tb_nl_unit;
  localparam int M = 8, ACCW = 32;
  logic relu_en = 0;
  logic signed [ACCW-1:0] in_data [M];
  logic signed [ACCW-1:0] out_data [M];
  int checks = 0, failures = 0;

  nl_unit #(.M_BATCH(M), .ACCW(ACCW)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int t = 0; t < 200; t++) begin
      relu_en = t[0];
      for (int j = 0; j < M; j++) in_data[j] = ACCW'(int'($urandom_range(200000, 0)) - 100000);
      #1;
      for (int j = 0; j < M; j++) begin
        int e;
        e = (relu_en && int'(in_data[j]) < 0) ? 0 : int'(in_data[j]);
        checks++;
        if (int'(out_data[j]) != e) begin failures++; $display("in %0d relu %0d out %0d", in_data[j], relu_en, out_data[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
