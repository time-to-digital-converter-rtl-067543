// tdc_delay_line -- behavioural model of the pulse-shrinking delay line of
// the TDC (an analog, current-starved circuit; not synthesizable as such).
//
// Each of the 15 delay elements is a voltage-controlled buffer whose rising
// edge is slowed by a current-starving transistor gated by V_mac while the
// falling edge passes fast, so the TDC_CLK pulse loses Delta T(V_mac) of
// width per stage until it vanishes. A lower V_mac starves harder, the pulse
// dies sooner and fewer taps fire. The model uses an ideal linear transfer
// over the published 200..800 mV input range:
//     n = floor((V_mac - VLO_MV) * STAGES / (VHI_MV - VLO_MV)), 0 <= n <= STAGES
// and tap k (delay_k, clock of DFF k) carries the pulse when k < n. Edge
// delays along the line are not modelled (taps follow tdc_clk at once), nor
// is the measured non-linearity.
module tdc_delay_line import tdc_cim_pkg::*; #(
  parameter int STAGES = TDC_STAGES,
  parameter int VLO_MV = 200,
  parameter int VHI_MV = 800
) (
  input  logic              tdc_clk,
  input  logic [VMAC_W-1:0] vmac_mv,
  output logic [STAGES-1:0] delay
);
  int unsigned n;

  always_comb begin
    if (int'(vmac_mv) <= VLO_MV)      n = 0;
    else if (int'(vmac_mv) >= VHI_MV) n = STAGES;
    else n = ((32'(vmac_mv) - 32'(VLO_MV)) * 32'(STAGES)) / 32'(VHI_MV - VLO_MV);
    for (int k = 0; k < STAGES; k++) delay[k] = tdc_clk && (32'(k) < n);
  end

endmodule
