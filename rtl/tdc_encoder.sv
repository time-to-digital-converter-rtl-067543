// tdc_encoder -- multiplexer-based thermometer-to-binary encoder of the TDC.
//
// therm[k] is the Q output of DFF k; the DFFs fill from 0 upward, so the
// number of ones n is found by a MUX tree that halves the search at each bit:
//   c3 = T7,  c2 = c3 ? T11 : T3,  c1 = T[8c3+4c2+1] (T1, T5, T9 or T13),
//   c0 = T[8c3+4c2+2c1].
// The published TDC reports 15 at the lowest V_mac (no tap fired) and 0 at
// the highest (all fifteen set), so binary_out = 15 - n, which for 4 bits is
// the bitwise inverse of {c3,c2,c1,c0}. The MUX-based style follows the
// published encoder; this particular tree is this design's.
// Combinational; STAGES must be 15 (4-bit output).
module tdc_encoder import tdc_cim_pkg::*; #(
  parameter int STAGES = TDC_STAGES
) (
  input  logic [STAGES-1:0]   therm,
  output logic [TDC_BITS-1:0] binary_out
);
  logic c3, c2, c1, c0;

  always_comb begin
    c3 = therm[7];
    c2 = c3 ? therm[11] : therm[3];
    c1 = therm[{c3, c2, 2'b01}];
    c0 = therm[{c3, c2, c1, 1'b0}];
    binary_out = ~{c3, c2, c1, c0};
  end

  initial assert (STAGES == 15) else $error("tdc_encoder needs 15 stages");

endmodule
