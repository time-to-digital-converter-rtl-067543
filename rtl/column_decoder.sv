// column_decoder -- decodes the number of kernels (NoK) into column enables.
//
// Kernel slot k owns columns 8k..8k+7 and the two capacitor arrays 2k (weight
// bits 3:0) and 2k+1 (weight bits 7:4). In compute mode (cim = 1) slots
// 0..nok-1 are active: their col_mux charge-sharing switches close and their
// columns are selected for the write-back of results. In a conventional write
// (cim = 0) wmask selects the kernel slots (bytes) to write and no col_mux
// switch closes. Decoding NoK into columns follows the published controller;
// the thermometer assignment to the lowest slots is this design's choice.
// Purely combinational.
module column_decoder import tdc_cim_pkg::*; #(
  parameter int KERNELS_P = KERNELS
) (
  input  logic                               cim,
  input  logic [$clog2(KERNELS_P+1)-1:0]     nok,
  input  logic [KERNELS_P-1:0]               wmask,
  output logic [2*KERNELS_P-1:0]             col_mux,
  output logic [WBITS*KERNELS_P-1:0]         wsel
);
  logic [KERNELS_P-1:0] active;

  always_comb begin
    for (int k = 0; k < KERNELS_P; k++) begin
      active[k] = cim ? (k < int'(nok)) : wmask[k];
      col_mux[2*k]   = cim && active[k];
      col_mux[2*k+1] = cim && active[k];
      for (int b = 0; b < WBITS; b++) wsel[WBITS*k+b] = active[k];
    end
  end

endmodule
