// tb_tdc_encoder -- every thermometer code 0..15 ones must encode to 15-n.
module tb_tdc_encoder;
  logic [14:0] therm;
  logic [3:0]  code;
  int checks = 0, failures = 0;

  tdc_encoder dut (.therm(therm), .binary_out(code));

  initial begin
    for (int n = 0; n <= 15; n++) begin
      therm = 15'((32'(1) << n) - 1);
      #1;
      checks++;
      if (int'(code) != 15 - n) begin
        failures++;
        $display("FAIL n=%0d code=%0d", n, code);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
