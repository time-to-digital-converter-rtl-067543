// tb_tdc_delay_line -- sweeps V_mac over 0..1000 mV and checks how many taps
// the pulse reaches, and that no tap fires without a pulse.
module tb_tdc_delay_line;
  import tb_ref_pkg::*;
  logic        tdc_clk;
  logic [9:0]  vmac;
  logic [14:0] delay;
  int checks = 0, failures = 0;

  tdc_delay_line dut (.tdc_clk(tdc_clk), .vmac_mv(vmac), .delay(delay));

  initial begin
    for (int v = 0; v <= 1000; v += 7) begin
      vmac = 10'(v);
      tdc_clk = 1'b0; #1;
      checks++;
      if (delay != '0) failures++;
      tdc_clk = 1'b1; #1;
      checks++;
      if ($countones(delay) != 15 - ref_code_from_v(v) ||
          delay != 15'((32'(1) << $countones(delay)) - 1)) begin
        failures++;
        $display("FAIL v=%0d taps=%b", v, delay);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
