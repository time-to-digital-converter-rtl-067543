// resonant_write_driver -- digital part of the energy-recycling write drivers
// of one bank (one driver per column, one inductor shared by all).
//
// Each column's driver selects its data with a multiplexer: D_in for a
// conventional write (cim_en = 0) or the MAC result Binary_out for a
// write-back (cim_en = 1). A write then runs four phases, one clock each:
//   RECYCLE_DN  vsr = 1: the bitline that must fall (WBL for a 0, WBLB for a 1)
//               discharges through the shared inductor towards V_ref = VDD/2,
//               which stores the charge;
//   DRIVE       vdn = 1: the pull-down completes the fall and wwl_en opens the
//               write wordline, so the cell is written;
//   RECYCLE_UP  vsr = 1: the inductor returns its energy to the bitline;
//   PRECHARGE   blpc = 1: both bitlines are restored to VDD.
// The data multiplexer and the recycle-then-return principle follow the
// published driver; the phase order within one write and one clock per phase
// are this design's choices. wsel (column switch) is the column enable
// latched at start. Bitlines are shown as logic levels: outside DRIVE both
// read 1 (precharged); a line at V_ref cannot be shown in two-state logic.
// Interface: start is accepted when busy is low; done pulses in the last
// phase; data and column enables are latched at start.
module resonant_write_driver import tdc_cim_pkg::*; #(
  parameter int COLS_P = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              cim_en,
  input  logic [COLS_P-1:0] din,
  input  logic [COLS_P-1:0] binary_out,
  input  logic [COLS_P-1:0] col_sel,
  output logic [COLS_P-1:0] wbl,
  output logic [COLS_P-1:0] wblb,
  output logic [COLS_P-1:0] wsel,
  output logic              vsr,
  output logic              vdn,
  output logic              blpc,
  output logic              wwl_en,
  output logic              busy,
  output logic              done
);
  wd_phase_e         ph;
  logic [COLS_P-1:0] d_write;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph      <= WD_IDLE;
      d_write <= '0;
      wsel    <= '0;
    end else begin
      unique case (ph)
        WD_IDLE: if (start) begin
          d_write <= cim_en ? binary_out : din;
          wsel    <= col_sel;
          ph      <= WD_RECYCLE_DN;
        end
        WD_RECYCLE_DN: ph <= WD_DRIVE;
        WD_DRIVE:      ph <= WD_RECYCLE_UP;
        WD_RECYCLE_UP: ph <= WD_PRECHARGE;
        WD_PRECHARGE: begin
          ph   <= WD_IDLE;
          wsel <= '0;
        end
        default:       ph <= WD_IDLE;
      endcase
    end
  end

  always_comb begin
    vsr    = (ph == WD_RECYCLE_DN) || (ph == WD_RECYCLE_UP);
    vdn    = (ph == WD_DRIVE);
    blpc   = (ph == WD_PRECHARGE) || (ph == WD_IDLE);
    wwl_en = (ph == WD_DRIVE);
    busy   = (ph != WD_IDLE);
    done   = (ph == WD_PRECHARGE);
    wbl    = vdn ? d_write  : '1;
    wblb   = vdn ? ~d_write : '1;
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("resonant_write_driver: start while busy");

endmodule
