// sram8t_array -- 8T SRAM bitcell array with a decoupled read port used for
// in-memory multiply-accumulate.
//
// Each 8T cell is a 6T latch plus a two-transistor read stack (gate of the
// lower device on the stored bit Q, gate of the upper device on the read
// wordline RWL). A pulse on RWL discharges the precharged read bitline RBL
// only when Q = 1, so a cell multiplies one input bit by one weight bit and
// many cells on one RBL add their discharges. This model keeps the stored
// bits in a memory and reports, per column, the summed discharge
//     rbl_dis[c] = sum_i rwl_code[i] * Q[rwl_row[i]][c]
// in units of one unit-pulse discharge (Ids*Tdis/C_RBL). rwl_code is the pulse
// amount on a wordline: an input nibble applied as binary-weighted pulses is
// taken to discharge 2^b units for bit b (the pulse weighting is an assumption
// of this design; the array size and the linear bitline sum follow the
// published cell). With one row pulsed by a unit code the same port serves
// a conventional read.
//
// Write port: the WWL row decoder is the wwl_row address; on a rising clock
// edge with wwl_en high, every column with wsel set takes the value on its
// write bitline wbl (WBLB is its complement). Read port: combinational.
module sram8t_array import tdc_cim_pkg::*; #(
  parameter int ROWS_P  = ROWS,
  parameter int COLS_P  = COLS,
  parameter int KROWS_P = KROWS,
  parameter int CODE_W  = NIB,
  parameter int DIS_W_P = DIS_W
) (
  input  logic                                   clk,
  // write port
  input  logic                                   wwl_en,
  input  logic [$clog2(ROWS_P)-1:0]              wwl_row,
  input  logic [COLS_P-1:0]                      wbl,
  input  logic [COLS_P-1:0]                      wsel,
  // read / compute port
  input  logic [KROWS_P-1:0][$clog2(ROWS_P)-1:0] rwl_row,
  input  logic [KROWS_P-1:0][CODE_W-1:0]         rwl_code,
  output logic [COLS_P-1:0][DIS_W_P-1:0]         rbl_dis
);

  logic [COLS_P-1:0] mem [ROWS_P];

  always_ff @(posedge clk) begin
    if (wwl_en) begin
      for (int c = 0; c < COLS_P; c++) begin
        if (wsel[c]) mem[wwl_row][c] <= wbl[c];
      end
    end
  end

  // The nine rows seen by the pulsed read wordlines.
  logic [KROWS_P-1:0][COLS_P-1:0] q_row;
  always_comb begin
    for (int i = 0; i < KROWS_P; i++) q_row[i] = mem[rwl_row[i]];
  end

  // Bitwise multiply (code AND Q) and accumulation along each RBL.
  always_comb begin
    for (int c = 0; c < COLS_P; c++) begin
      rbl_dis[c] = '0;
      for (int i = 0; i < KROWS_P; i++) begin
        if (q_row[i][c]) rbl_dis[c] = rbl_dis[c] + DIS_W_P'(rwl_code[i]);
      end
    end
  end

endmodule
