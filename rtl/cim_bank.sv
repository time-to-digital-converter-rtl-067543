// cim_bank -- one 256x256 TDC compute-in-memory bank (8 KB).
//
// Holds the 8T array with its RWL drivers and WWL port, the column decoder,
// 64 capacitor arrays (array c on columns 4c..4c+3), the readout (64 TDCs,
// 32 shift-and-add units, read sensing), the output buffer and the resonant
// write drivers, wired as in the published macro floorplan: IFM nibbles ->
// RWLs -> RBL discharge -> capacitor arrays -> V_mac -> TDC -> shift and add
// -> output buffer -> write drivers -> array. Kernel slot k stores its nine
// 8-bit weights in columns 8k..8k+7 of rows win_base..win_base+8.
// Timing: MAC in two cycles (phase PH_LO then PH_HI), results in obuf_data
// from the edge ending PH_HI; a write takes four cycles after rwd_start.
// The write driver's phase controls (rwd_vsr, rwd_vdn, rwd_blpc) leave the
// bank because the inductor and bitline switches they steer are analog.
// The complementary bitline WBLB is generated but not consumed: the array
// model stores WBL directly, a two-state stand-in for the differential write.
module cim_bank import tdc_cim_pkg::*; (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          tdc_clk,
  input  logic                          ff_rst,
  input  logic                          ff_en,
  input  cim_phase_e                    phase,
  input  rwl_mode_e                     rwl_mode,
  input  logic [ROW_AW-1:0]             rwl_row,
  input  logic [KROWS-1:0][NIB-1:0]     nibble,
  input  logic                          cim,
  input  logic [NOK_W-1:0]              nok,
  input  logic [KERNELS-1:0]            wmask,
  input  logic [ROW_AW-1:0]             wr_row,
  input  logic                          rwd_start,
  input  logic                          rwd_cim_en,
  input  logic                          obuf_load,
  input  logic [COLS-1:0]               din,
  output logic [COLS-1:0]               dout,
  output logic [KERNELS-1:0][WBITS-1:0] obuf_data,
  output logic [KERNELS-1:0][ACC_W-1:0] result_full,
  output logic [NUM_CAP-1:0][TDC_BITS-1:0] tdc_code,
  output logic                          rwd_busy,
  output logic                          rwd_done,
  output logic                          rwd_vsr,   // to the resonant inductor switch
  output logic                          rwd_vdn,   // bitline pull-down
  output logic                          rwd_blpc   // bitline precharge
);
  logic [KROWS-1:0][ROW_AW-1:0]  a_row;
  logic [KROWS-1:0][NIB-1:0]     a_code;
  logic [COLS-1:0][DIS_W-1:0]    rbl_dis;
  logic [NUM_CAP-1:0]            col_mux;
  logic [COLS-1:0]               col_wsel;
  logic [NUM_CAP-1:0][VMAC_W-1:0] vmac;
  logic [KERNELS-1:0][WBITS-1:0] result;
  logic                          res_valid;
  logic                          obuf_full;
  logic [COLS-1:0]               wbl, wblb, wsel;   // wblb: see note above
  logic                          wwl_en;

  rwl_drivers u_rwl (
    .mode     (rwl_mode),
    .read_row (rwl_row),
    .win_base (rwl_row),
    .nibble   (nibble),
    .rwl_row  (a_row),
    .rwl_code (a_code)
  );

  sram8t_array u_array (
    .clk      (clk),
    .wwl_en   (wwl_en),
    .wwl_row  (wr_row),
    .wbl      (wbl),
    .wsel     (wsel),
    .rwl_row  (a_row),
    .rwl_code (a_code),
    .rbl_dis  (rbl_dis)
  );

  column_decoder u_coldec (
    .cim     (cim),
    .nok     (nok),
    .wmask   (wmask),
    .col_mux (col_mux),
    .wsel    (col_wsel)
  );

  for (genvar c = 0; c < NUM_CAP; c++) begin : g_cap
    cap_array u_cap (
      .col_mux (col_mux[c] && (phase != PH_IDLE)),
      .rbl_dis (rbl_dis[NIB*c +: NIB]),
      .vmac_mv (vmac[c])
    );
  end

  readout u_readout (
    .clk         (clk),
    .rst_n       (rst_n),
    .tdc_clk     (tdc_clk),
    .ff_rst      (ff_rst),
    .ff_en       (ff_en),
    .phase       (phase),
    .vmac_mv     (vmac),
    .rbl_dis     (rbl_dis),
    .tdc_code    (tdc_code),
    .result      (result),
    .result_full (result_full),
    .valid       (res_valid),
    .dout        (dout)
  );

  output_buffer u_obuf (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (obuf_load && res_valid),
    .clear    (rwd_start && rwd_cim_en),
    .data_in  (result),
    .data_out (obuf_data),
    .full     (obuf_full)
  );

  resonant_write_driver u_rwd (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (rwd_start),
    .cim_en     (rwd_cim_en),
    .din        (din),
    .binary_out (obuf_data),
    .col_sel    (col_wsel),
    .wbl        (wbl),
    .wblb       (wblb),
    .wsel       (wsel),
    .vsr        (rwd_vsr),
    .vdn        (rwd_vdn),
    .blpc       (rwd_blpc),
    .wwl_en     (wwl_en),
    .busy       (rwd_busy),
    .done       (rwd_done)
  );

  // A write-back must find results in the output buffer.
  assert property (@(posedge clk) disable iff (!rst_n) rwd_start && rwd_cim_en |-> obuf_full)
    else $error("cim_bank: write-back with an empty output buffer");

endmodule
