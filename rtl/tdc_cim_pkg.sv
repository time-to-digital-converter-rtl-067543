// tdc_cim_pkg -- constants and types shared by the TDC compute-in-memory macro.
//
// One bank is a 256x256 array of 8T bitcells. A 3x3 convolution kernel of
// 8-bit weights occupies nine consecutive rows and eight adjacent columns
// (bit b of the weight in column 8k+b of kernel slot k), so a bank holds 32
// kernel slots per 9-row window. Every group of four columns feeds one
// binary-weighted capacitor array and one 4-bit time-to-digital converter
// (64 per bank). An 8-bit input is applied as two 4-bit nibbles in two clock
// cycles. The array size, the nine wordlines, the nibble split, the 15-stage
// TDC and the 64 TDCs are the published numbers; the command set and its
// encoding are this implementation's own.
package tdc_cim_pkg;

  localparam int ROWS       = 256;              // bitcell rows per bank
  localparam int COLS       = 256;              // bitcell columns per bank
  localparam int ROW_AW     = $clog2(ROWS);
  localparam int KROWS      = 9;                // RWLs pulsed together (3x3 kernel)
  localparam int WBITS      = 8;                // weight and IFM precision
  localparam int NIB        = 4;                // bits per nibble / per capacitor array
  localparam int KERNELS    = COLS / WBITS;     // kernel slots per bank (32)
  localparam int NUM_CAP    = COLS / NIB;       // capacitor arrays = TDCs per bank (64)
  localparam int TDC_BITS   = 4;
  localparam int TDC_STAGES = 15;               // delay elements and DFFs per TDC
  localparam int DIS_W      = 8;                // RBL discharge count, max 9*15 = 135
  localparam int VMAC_W     = 10;               // V_mac in millivolts
  localparam int ACC_W      = 13;               // full shift-and-add sum, max 4335
  localparam int NOK_W      = $clog2(KERNELS + 1);
  localparam int NUM_BANKS  = 2;                // 2 x 8 KB = 16 KB macro
  localparam int BANK_AW    = 4;                // bank index field in a command

  // Command set of the main controller.
  typedef enum logic [2:0] {
    OP_NOP      = 3'd0,
    OP_WRITE    = 3'd1,   // conventional row write of D_in through the write drivers
    OP_READ     = 3'd2,   // conventional row read, one RWL
    OP_LOAD_IFM = 3'd3,   // load a 3x3 IFM patch into input buffer(s)
    OP_MAC      = 3'd4    // two-cycle 8x8-bit MAC on all banks, optional write-back
  } op_e;

  // Which nibble of the IFM the array sees in the current cycle.
  typedef enum logic [1:0] {
    PH_IDLE = 2'd0,
    PH_LO   = 2'd1,       // first cycle: IFM bits 3:0
    PH_HI   = 2'd2        // second cycle: IFM bits 7:4
  } cim_phase_e;

  typedef enum logic [1:0] {
    RWL_OFF  = 2'd0,
    RWL_READ = 2'd1,
    RWL_CIM  = 2'd2
  } rwl_mode_e;

  typedef enum logic [2:0] {
    WD_IDLE       = 3'd0,
    WD_RECYCLE_DN = 3'd1, // falling bitline discharges into the inductor (vsr)
    WD_DRIVE      = 3'd2, // pull-down completes the write, WWL open (vdn)
    WD_RECYCLE_UP = 3'd3, // inductor returns its energy to the bitline (vsr)
    WD_PRECHARGE  = 3'd4  // bitlines precharged to VDD (blpc)
  } wd_phase_e;

  typedef struct packed {
    op_e                op;
    logic [BANK_AW-1:0] bank;       // target bank of WRITE, READ, unicast LOAD_IFM
    logic [ROW_AW-1:0]  row;        // WRITE/READ row, MAC window base row
    logic [ROW_AW-1:0]  dst_row;    // MAC write-back row
    logic [NOK_W-1:0]   nok;        // MAC: number of kernels (active slots 0..nok-1)
    logic               broadcast;  // LOAD_IFM: same patch to every bank
    logic               writeback;  // MAC: write the 8-bit results back into the array
    logic [KERNELS-1:0] wmask;      // WRITE: byte (kernel slot) write mask
  } cmd_t;

endpackage
