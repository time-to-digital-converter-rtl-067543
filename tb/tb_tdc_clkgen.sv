// tb_tdc_clkgen -- TDC_CLK must be high only in the low half of enabled
// cycles, ff_rst only in their high half, and nothing in disabled cycles.
module tb_tdc_clkgen;
  logic clk = 0, rst_n = 0, en_next = 0;
  logic tdc_clk, ff_rst, ff_en;
  int checks = 0, failures = 0;
  int pulses = 0;

  tdc_clkgen dut (.clk(clk), .rst_n(rst_n), .en_next(en_next), .tdc_clk(tdc_clk),
                  .ff_rst(ff_rst), .ff_en(ff_en));
  always #5 clk = ~clk;
  always @(posedge tdc_clk) pulses++;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      logic e;
      e = 1'($urandom_range(0, 1));
      @(negedge clk); en_next = e;          // registered at the next rising edge
      @(posedge clk); #2;                   // high half of the cycle
      checks++;
      if (tdc_clk !== 1'b0 || ff_rst !== e || ff_en !== e) failures++;
      @(negedge clk); #2;                   // low half
      checks++;
      if (tdc_clk !== e || ff_rst !== 1'b0) begin
        failures++;
        $display("FAIL t=%0d e=%0d tdc_clk=%0d", t, e, tdc_clk);
      end
    end
    checks++;
    if (pulses == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
