// tdc -- 4-bit time-to-digital converter digitising V_mac.
//
// The TDC_CLK pulse runs down a 15-stage pulse-shrinking delay line whose
// shrink per stage is set by V_mac. Tap k clocks a positive-edge DFF whose D
// input is ff_en, so every DFF the pulse still reaches latches a 1 and the
// rest keep 0; ff_rst clears them before each conversion. The resulting
// thermometer code goes through a MUX-based encoder to binary_out<3:0>
// (15 at the bottom of the input range, 0 at the top). Structure follows the
// published TDC; the reset is asynchronous here. Timing: with tdc_clkgen,
// the DFFs clear in the high half of a clock cycle, capture at the falling
// edge, and binary_out is stable for the next rising edge.
module tdc import tdc_cim_pkg::*; #(
  parameter int STAGES = TDC_STAGES
) (
  input  logic                tdc_clk,
  input  logic                ff_rst,
  input  logic                ff_en,
  input  logic [VMAC_W-1:0]   vmac_mv,
  output logic [STAGES-1:0]   therm,
  output logic [TDC_BITS-1:0] binary_out
);
  logic [STAGES-1:0] delay;

  tdc_delay_line #(.STAGES(STAGES)) u_line (
    .tdc_clk (tdc_clk),
    .vmac_mv (vmac_mv),
    .delay   (delay)
  );

  for (genvar k = 0; k < STAGES; k++) begin : g_dff
    logic q;
    always_ff @(posedge delay[k] or posedge ff_rst) begin
      if (ff_rst) q <= 1'b0;
      else        q <= ff_en;
    end
    assign therm[k] = q;
  end

  tdc_encoder #(.STAGES(STAGES)) u_enc (
    .therm      (therm),
    .binary_out (binary_out)
  );

endmodule
