// tdc_clkgen -- derives the TDC start pulse and DFF controls from the system
// clock.
//
// The published TDC receives TDC_CLK made from the system clock by a
// buffer-based delay. Here the delay is realised as half a clock period:
// en_next (from the main controller) is registered on the rising edge, and in
// every cycle where it is set
//   ff_rst  = en & clk   clears the TDC flip-flops in the high half,
//   tdc_clk = en & ~clk  is the start pulse, rising at the falling clock edge,
//                        one half period wide (1 ns at 0.5 GHz).
// The thermometer code therefore settles in the low half and is sampled by
// the shift-and-add at the next rising edge. Because en changes only while
// clk rises, neither gated output glitches. ff_en (the DFF data input) is 1
// during conversions. The half-period delay is this design's choice.
module tdc_clkgen (
  input  logic clk,
  input  logic rst_n,
  input  logic en_next,
  output logic tdc_clk,
  output logic ff_rst,
  output logic ff_en
);
  logic en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) en <= 1'b0;
    else        en <= en_next;
  end

  assign tdc_clk = en & ~clk;
  assign ff_rst  = en & clk;
  assign ff_en   = en;

endmodule
