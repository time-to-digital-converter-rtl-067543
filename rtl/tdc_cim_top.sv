// tdc_cim_top -- TDC-based compute-in-memory macro with NUM_BANKS_P banks.
//
// Main control, the TDC clock generator, one input buffer per bank and the
// banks. Weights are written once with OP_WRITE (weight stationary); IFM
// patches are loaded with OP_LOAD_IFM, broadcast to all banks or sent to one;
// OP_MAC computes, in every bank at once, the 3x3 dot product of the patch
// with the nine weights of each of the first nok kernel slots at window base
// cmd.row, in two cycles, and optionally writes the 8-bit results back into
// row cmd.dst_row. Results of the last MAC stay visible on mac_result.
//
// Interface: cmd_valid/cmd_ready handshake with cmd (tdc_cim_pkg::cmd_t);
// wdata (D_in) must be valid in the cycle a WRITE is accepted, ifm in the
// cycle a LOAD_IFM is accepted; rsp_valid pulses once per command, and for a
// READ rdata then holds the row. Latencies: see main_control. Two banks of
// 256x256 make the 16 KB configuration of the published throughput figures.
// res_vsr / res_vdn / res_blpc are the write drivers' phase controls for the
// resonant inductor and bitline switches, which are analog and lie outside
// this RTL: vsr is high in the two energy-recycling cycles of a write.
module tdc_cim_top import tdc_cim_pkg::*; #(
  parameter int NUM_BANKS_P = NUM_BANKS
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       cmd_valid,
  output logic                                       cmd_ready,
  input  cmd_t                                       cmd,
  input  logic [COLS-1:0]                            wdata,
  input  logic [KROWS-1:0][WBITS-1:0]                ifm,
  output logic                                       rsp_valid,
  output logic [COLS-1:0]                            rdata,
  output logic [NUM_BANKS_P-1:0][KERNELS-1:0][WBITS-1:0] mac_result,
  output logic [NUM_BANKS_P-1:0]                     res_vsr,   // per bank: inductor switch
  output logic [NUM_BANKS_P-1:0]                     res_vdn,   // per bank: bitline pull-down
  output logic [NUM_BANKS_P-1:0]                     res_blpc   // per bank: bitline precharge
);
  cim_phase_e             phase;
  logic                   tdc_en_next, tdc_clk, ff_rst, ff_en;
  rwl_mode_e              rwl_mode;
  logic [ROW_AW-1:0]      rwl_row, wr_row;
  logic                   cim, rwd_cim_en, obuf_load, read_sample;
  logic [NOK_W-1:0]       nok;
  logic [KERNELS-1:0]     wmask;
  logic [NUM_BANKS_P-1:0] ifm_load, rwd_start, bank_sel, rwd_done, rwd_busy;
  logic [NUM_BANKS_P-1:0][COLS-1:0] dout;

  main_control #(.NUM_BANKS_P(NUM_BANKS_P)) u_ctl (
    .clk         (clk),
    .rst_n       (rst_n),
    .cmd_valid   (cmd_valid),
    .cmd_ready   (cmd_ready),
    .cmd         (cmd),
    .rwd_done    (|rwd_done),
    .phase       (phase),
    .tdc_en_next (tdc_en_next),
    .rwl_mode    (rwl_mode),
    .rwl_row     (rwl_row),
    .cim         (cim),
    .nok         (nok),
    .wmask       (wmask),
    .wr_row      (wr_row),
    .ifm_load    (ifm_load),
    .rwd_start   (rwd_start),
    .rwd_cim_en  (rwd_cim_en),
    .obuf_load   (obuf_load),
    .bank_sel    (bank_sel),
    .read_sample (read_sample),
    .rsp_valid   (rsp_valid)
  );

  tdc_clkgen u_clkgen (
    .clk     (clk),
    .rst_n   (rst_n),
    .en_next (tdc_en_next),
    .tdc_clk (tdc_clk),
    .ff_rst  (ff_rst),
    .ff_en   (ff_en)
  );

  for (genvar b = 0; b < NUM_BANKS_P; b++) begin : g_bank
    logic [KROWS-1:0][NIB-1:0]     nibble;
    logic [KERNELS-1:0][ACC_W-1:0] result_full;
    logic [NUM_CAP-1:0][TDC_BITS-1:0] tdc_code;

    input_buffer u_ibuf (
      .clk     (clk),
      .rst_n   (rst_n),
      .load    (ifm_load[b]),
      .ifm     (ifm),
      .sel_msb (phase == PH_HI),
      .nibble  (nibble)
    );

    cim_bank u_bank (
      .clk         (clk),
      .rst_n       (rst_n),
      .tdc_clk     (tdc_clk),
      .ff_rst      (ff_rst),
      .ff_en       (ff_en),
      .phase       (phase),
      .rwl_mode    (bank_sel[b] || rwl_mode == RWL_CIM ? rwl_mode : RWL_OFF),
      .rwl_row     (rwl_row),
      .nibble      (nibble),
      .cim         (cim),
      .nok         (nok),
      .wmask       (wmask),
      .wr_row      (wr_row),
      .rwd_start   (rwd_start[b]),
      .rwd_cim_en  (rwd_cim_en),
      .obuf_load   (obuf_load),
      .din         (wdata),
      .dout        (dout[b]),
      .obuf_data   (mac_result[b]),
      .result_full (result_full),
      .tdc_code    (tdc_code),
      .rwd_busy    (rwd_busy[b]),
      .rwd_done    (rwd_done[b]),
      .rwd_vsr     (res_vsr[b]),
      .rwd_vdn     (res_vdn[b]),
      .rwd_blpc    (res_blpc[b])
    );
  end

  // D_out of the addressed bank, sampled at the end of the read cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rdata <= '0;
    else if (read_sample) begin
      for (int b = 0; b < NUM_BANKS_P; b++) if (bank_sel[b]) rdata <= dout[b];
    end
  end

endmodule
