// readout -- readout circuit of one bank: 64 TDCs, 32 shift-and-add units
// and the conventional-read sensing.
//
// TDC c digitises V_mac of capacitor array c (columns 4c..4c+3). Kernel slot
// k pairs TDC 2k (weight bits 3:0) with TDC 2k+1 (weight bits 7:4) in one
// shift-and-add unit, whose result is Binary_out of that slot. For a
// conventional read one RWL is pulsed and a column reads 1 when its RBL
// discharged, which the 8T read port does only for Q = 1; that sensing rule
// is this design's. Timing: see tdc and shift_add; results are valid
// (combinationally) during the second MAC cycle.
module readout import tdc_cim_pkg::*; #(
  parameter int KERNELS_P = KERNELS
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 tdc_clk,
  input  logic                                 ff_rst,
  input  logic                                 ff_en,
  input  cim_phase_e                           phase,
  input  logic [2*KERNELS_P-1:0][VMAC_W-1:0]   vmac_mv,
  input  logic [WBITS*KERNELS_P-1:0][DIS_W-1:0] rbl_dis,
  output logic [2*KERNELS_P-1:0][TDC_BITS-1:0] tdc_code,
  output logic [KERNELS_P-1:0][WBITS-1:0]      result,
  output logic [KERNELS_P-1:0][ACC_W-1:0]      result_full,
  output logic                                 valid,
  output logic [WBITS*KERNELS_P-1:0]           dout
);
  logic [KERNELS_P-1:0] v;

  for (genvar c = 0; c < 2*KERNELS_P; c++) begin : g_tdc
    logic [TDC_STAGES-1:0] therm;
    tdc u_tdc (
      .tdc_clk    (tdc_clk),
      .ff_rst     (ff_rst),
      .ff_en      (ff_en),
      .vmac_mv    (vmac_mv[c]),
      .therm      (therm),
      .binary_out (tdc_code[c])
    );
  end

  for (genvar k = 0; k < KERNELS_P; k++) begin : g_sa
    shift_add u_sa (
      .clk        (clk),
      .rst_n      (rst_n),
      .phase      (phase),
      .code_lo    (tdc_code[2*k]),
      .code_hi    (tdc_code[2*k+1]),
      .valid      (v[k]),
      .mac_full   (result_full[k]),
      .binary_out (result[k])
    );
  end

  assign valid = v[0];

  always_comb begin
    for (int c = 0; c < WBITS*KERNELS_P; c++) dout[c] = (rbl_dis[c] != '0);
  end

endmodule
