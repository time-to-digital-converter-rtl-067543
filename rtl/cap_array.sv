// cap_array -- behavioural model of one binary-weighted capacitor array with
// its accumulation capacitor C_acc (an analog block; the model computes its
// settled output voltage as an integer number of millivolts).
//
// Four read bitlines RBL3..RBL0 of one weight nibble are each tied to a
// bitwise capacitor of 8C, 4C, 2C and 1C (1C = 4 fF, C_acc = 32 fF in the
// published macro). During the multiply phase every capacitor discharges in
// proportion to its RBL's discharge; when col_mux closes, charge sharing onto
// C_acc gives V_mac, which falls linearly with
//     S = 8*d3 + 4*d2 + 2*d1 + d0 = sum_i x_i * w_i  (nibble x nibble MAC).
// The model maps S = 0 to the top of the TDC input range (800 mV) and the
// full-scale S = MAC_FS (9 rows x 15 x 15) to its bottom (200 mV):
//     V_mac = VTOP_MV - S*(VTOP_MV-VBOT_MV)/MAC_FS, clipped at VBOT_MV.
// The 200..800 mV range is the published TDC range; placing full scale at its
// bottom and the ideal linearity are assumptions. With col_mux open V_mac
// stays at VTOP_MV. Combinational.
module cap_array import tdc_cim_pkg::*; #(
  parameter int VTOP_MV = 800,
  parameter int VBOT_MV = 200,
  parameter int MAC_FS  = KROWS * 15 * 15
) (
  input  logic                      col_mux,
  input  logic [NIB-1:0][DIS_W-1:0] rbl_dis,   // index b: RBL with capacitor 2^b C
  output logic [VMAC_W-1:0]         vmac_mv
);
  int unsigned s, drop;

  always_comb begin
    s = 0;
    for (int b = 0; b < NIB; b++) s += (32'(rbl_dis[b]) << b);
    drop = (s * 32'(VTOP_MV - VBOT_MV)) / 32'(MAC_FS);
    if (!col_mux)                         vmac_mv = VMAC_W'(VTOP_MV);
    else if (drop >= 32'(VTOP_MV - VBOT_MV)) vmac_mv = VMAC_W'(VBOT_MV);
    else                                  vmac_mv = VMAC_W'(32'(VTOP_MV) - drop);
  end

endmodule
