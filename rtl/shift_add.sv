// shift_add -- combines the two TDC codes of one kernel over the two input
// nibble cycles into the multi-bit MAC result.
//
// code_lo is the 4-bit partial MAC of weight bits 3:0, code_hi that of
// weight bits 7:4. In the first cycle (phase PH_LO, IFM bits 3:0) the
// partials are weighted by <<0 and <<4 and held; in the second (PH_HI, IFM
// bits 7:4) they are weighted by <<4 and <<8 and added to the held sum:
//   mac_full = lo1 + (hi1<<4) + (lo2<<4) + (hi2<<8)   (max 4335, 13 bits).
// The shifts are the published ones. The published result is 8 bits wide,
// which cannot hold this sum; this design keeps the full sum on mac_full and
// gives binary_out = mac_full >> OUT_SHIFT, saturated to 8 bits (its 8 most
// significant bits for OUT_SHIFT = 5).
// Timing: codes are sampled at the rising edge that ends each phase cycle;
// valid, mac_full and binary_out are combinational during PH_HI and are
// captured by the output buffer at the edge ending it.
module shift_add import tdc_cim_pkg::*; #(
  parameter int OUT_SHIFT = 5
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cim_phase_e          phase,
  input  logic [TDC_BITS-1:0] code_lo,
  input  logic [TDC_BITS-1:0] code_hi,
  output logic                valid,
  output logic [ACC_W-1:0]    mac_full,
  output logic [WBITS-1:0]    binary_out
);
  logic [ACC_W-1:0] first;     // partial sum of the first cycle
  logic [ACC_W-1:0] cur;       // this cycle's two codes, weighted <<0 and <<4
  logic [ACC_W-1:0] scaled;

  assign cur = ACC_W'(code_lo) + (ACC_W'(code_hi) << 4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              first <= '0;
    else if (phase == PH_LO) first <= cur;
  end

  always_comb begin
    valid      = (phase == PH_HI);
    mac_full   = first + (cur << 4);
    scaled     = mac_full >> OUT_SHIFT;
    binary_out = (scaled > ACC_W'(255)) ? 8'hFF : scaled[WBITS-1:0];
  end

endmodule
