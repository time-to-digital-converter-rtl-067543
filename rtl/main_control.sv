// main_control -- command sequencer of the TDC compute-in-memory macro.
//
// Commands arrive on a valid/ready handshake (accepted on a rising edge with
// cmd_valid && cmd_ready; cmd must stay stable while cmd_valid waits):
//   OP_LOAD_IFM  the IFM patch is written, in the accept cycle, into the input
//                buffer of every bank (broadcast = 1: kernel parallelism, the
//                same input for all banks) or of bank cmd.bank only
//                (broadcast = 0: input parallelism, a different patch per bank).
//   OP_WRITE     the write drivers of bank cmd.bank start in the accept cycle
//                with D_in and byte mask wmask; row cmd.row is written.
//   OP_READ      one cycle with the single RWL of cmd.row pulsed in bank
//                cmd.bank; the top samples D_out at its end.
//   OP_MAC       all banks: cycle 1 (PH_LO) applies the LSB nibbles of the
//                buffered patch to the nine RWLs at window base cmd.row,
//                cycle 2 (PH_HI) the MSB nibbles; the TDC clock runs in both;
//                the results enter the output buffers at the end of cycle 2.
//                With writeback = 1 the write drivers then write the results
//                of kernel slots 0..nok-1 into row cmd.dst_row (cim_en = 1).
// Every command ends with a one-cycle rsp_valid (DONE state). Latency from
// the accepting edge to rsp_valid: LOAD 1 cycle, READ 2, WRITE 5, MAC 3
// without and 8 with write-back. The two-cycle MAC follows the published
// scheme; the command set, handshake and the other timings are this design's.
module main_control import tdc_cim_pkg::*; #(
  parameter int NUM_BANKS_P = NUM_BANKS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  cmd_t                   cmd,
  input  logic                   rwd_done,      // write driver of the active bank(s) finishing
  output cim_phase_e             phase,
  output logic                   tdc_en_next,
  output rwl_mode_e              rwl_mode,
  output logic [ROW_AW-1:0]      rwl_row,       // read row or window base
  output logic                   cim,           // column decoder in NoK mode
  output logic [NOK_W-1:0]       nok,
  output logic [KERNELS-1:0]     wmask,
  output logic [ROW_AW-1:0]      wr_row,        // WWL row of a write
  output logic [NUM_BANKS_P-1:0] ifm_load,
  output logic [NUM_BANKS_P-1:0] rwd_start,
  output logic                   rwd_cim_en,
  output logic                   obuf_load,
  output logic [NUM_BANKS_P-1:0] bank_sel,      // bank addressed by READ/WRITE
  output logic                   read_sample,   // top captures D_out at this edge
  output logic                   rsp_valid
);
  typedef enum logic [2:0] {
    S_IDLE, S_READ, S_WAIT_WR, S_CIM_LO, S_CIM_HI, S_WB, S_WAIT_WB, S_DONE
  } state_e;

  state_e state, state_nx;
  cmd_t   cmd_q, act;
  logic   accept;

  assign cmd_ready = (state == S_IDLE);
  assign accept    = cmd_valid && cmd_ready;
  assign act       = (state == S_IDLE) ? cmd : cmd_q;

  always_comb begin
    state_nx = state;
    unique case (state)
      S_IDLE: if (accept) begin
        unique case (cmd.op)
          OP_READ:     state_nx = S_READ;
          OP_WRITE:    state_nx = S_WAIT_WR;
          OP_LOAD_IFM: state_nx = S_DONE;
          OP_MAC:      state_nx = S_CIM_LO;
          default:     state_nx = S_DONE;
        endcase
      end
      S_READ:    state_nx = S_DONE;
      S_WAIT_WR: if (rwd_done) state_nx = S_DONE;
      S_CIM_LO:  state_nx = S_CIM_HI;
      S_CIM_HI:  state_nx = cmd_q.writeback ? S_WB : S_DONE;
      S_WB:      state_nx = S_WAIT_WB;
      S_WAIT_WB: if (rwd_done) state_nx = S_DONE;
      S_DONE:    state_nx = S_IDLE;
      default:   state_nx = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cmd_q <= '0;
    end else begin
      state <= state_nx;
      if (accept) cmd_q <= cmd;
    end
  end

  always_comb begin
    logic [NUM_BANKS_P-1:0] onehot;
    onehot = '0;
    for (int b = 0; b < NUM_BANKS_P; b++) onehot[b] = (int'(act.bank) == b);

    phase       = (state == S_CIM_LO) ? PH_LO : (state == S_CIM_HI) ? PH_HI : PH_IDLE;
    tdc_en_next = (state_nx == S_CIM_LO) || (state_nx == S_CIM_HI);
    rwl_mode    = (state == S_READ) ? RWL_READ
                : (state == S_CIM_LO || state == S_CIM_HI) ? RWL_CIM : RWL_OFF;
    rwl_row     = act.row;
    cim         = (act.op == OP_MAC);
    nok         = act.nok;
    wmask       = act.wmask;
    wr_row      = (act.op == OP_MAC) ? act.dst_row : act.row;
    bank_sel    = onehot;
    ifm_load    = (accept && cmd.op == OP_LOAD_IFM) ? (cmd.broadcast ? '1 : onehot) : '0;
    rwd_start   = (accept && cmd.op == OP_WRITE) ? onehot
                : (state == S_WB) ? '1 : '0;
    rwd_cim_en  = (state == S_WB);
    obuf_load   = (state == S_CIM_HI);
    read_sample = (state == S_READ);
    rsp_valid   = (state == S_DONE);
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd))
    else $error("main_control: command changed or dropped before it was accepted");

  assert property (@(posedge clk) disable iff (!rst_n)
                   accept |-> int'(cmd.bank) < NUM_BANKS_P || (cmd.op == OP_MAC) ||
                              (cmd.op == OP_LOAD_IFM && cmd.broadcast) || cmd.op == OP_NOP)
    else $error("main_control: bank index out of range");

endmodule
