// tb_tdc -- full TDC conversion: clear the DFFs with ff_rst, fire a TDC_CLK
// pulse, and compare binary_out with the ideal transfer over 150..850 mV.
// Also checks that the code is held after the pulse and cleared by ff_rst.
module tb_tdc;
  import tb_ref_pkg::*;
  logic        tdc_clk = 0, ff_rst = 0, ff_en = 1;
  logic [9:0]  vmac;
  logic [14:0] therm;
  logic [3:0]  code;
  int checks = 0, failures = 0;

  tdc dut (.tdc_clk(tdc_clk), .ff_rst(ff_rst), .ff_en(ff_en), .vmac_mv(vmac),
           .therm(therm), .binary_out(code));

  initial begin
    for (int v = 150; v <= 850; v += 5) begin
      vmac = 10'(v);
      ff_rst = 1; #1; ff_rst = 0; #1;
      checks++;
      if (therm != '0) failures++;
      tdc_clk = 1; #1; tdc_clk = 0; #1;
      vmac = 10'd0; #1;               // code must not follow V_mac after the pulse
      checks++;
      if (int'(code) != ref_code_from_v(v)) begin
        failures++;
        $display("FAIL v=%0d code=%0d exp=%0d", v, code, ref_code_from_v(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
