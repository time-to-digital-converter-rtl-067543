// rwl_drivers -- programmable read-wordline decoder and drivers.
//
// In a conventional read a single RWL is pulsed once (unit pulse) at
// read_row. In compute mode nine RWLs are pulsed together, rows
// win_base .. win_base+8, the 3x3 kernel window; RWL i carries input nibble
// i of the IFM patch, where a 1 bit produces a pulse and a 0 bit none. The
// nine drivers and the single-row read follow the published macro; the
// window being nine consecutive rows at any base row is this design's
// choice of "programmable" decoding. The pulse train itself is represented
// by its amount (the nibble value) rather than by sub-cycle pulses.
//
// Interface: outputs rwl_row[i] (pulsed row) and rwl_code[i] (pulse amount,
// 0 = no pulse). Purely combinational, valid within the cycle.
module rwl_drivers import tdc_cim_pkg::*; #(
  parameter int ROWS_P  = ROWS,
  parameter int KROWS_P = KROWS
) (
  input  rwl_mode_e                              mode,
  input  logic [$clog2(ROWS_P)-1:0]              read_row,
  input  logic [$clog2(ROWS_P)-1:0]              win_base,
  input  logic [KROWS_P-1:0][NIB-1:0]            nibble,
  output logic [KROWS_P-1:0][$clog2(ROWS_P)-1:0] rwl_row,
  output logic [KROWS_P-1:0][NIB-1:0]            rwl_code
);
  localparam int AW = $clog2(ROWS_P);

  always_comb begin
    for (int i = 0; i < KROWS_P; i++) begin
      rwl_row[i]  = '0;
      rwl_code[i] = '0;
      unique case (mode)
        RWL_READ: begin
          rwl_row[i]  = read_row;
          rwl_code[i] = (i == 0) ? NIB'(1) : '0;
        end
        RWL_CIM: begin
          rwl_row[i]  = win_base + AW'(i);
          rwl_code[i] = nibble[i];
        end
        default: ;
      endcase
    end
  end

endmodule
