// input_buffer -- input activation buffer of one bank.
//
// Holds the nine 8-bit IFM values of one 3x3 patch as two rows: the row of
// their 4-bit LSB nibbles and the row of their 4-bit MSB nibbles. In a MAC
// the RWL drivers take the LSB row in the first cycle and the MSB row in the
// second (sel_msb). The two-row split is the published one; the depth of
// one patch is this design's. load captures ifm on the rising edge.
module input_buffer import tdc_cim_pkg::*; #(
  parameter int KROWS_P = KROWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load,
  input  logic [KROWS_P-1:0][WBITS-1:0] ifm,
  input  logic                          sel_msb,
  output logic [KROWS_P-1:0][NIB-1:0]   nibble
);
  logic [KROWS_P-1:0][NIB-1:0] lsb_row, msb_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lsb_row <= '0;
      msb_row <= '0;
    end else if (load) begin
      for (int i = 0; i < KROWS_P; i++) begin
        lsb_row[i] <= ifm[i][NIB-1:0];
        msb_row[i] <= ifm[i][WBITS-1:NIB];
      end
    end
  end

  assign nibble = sel_msb ? msb_row : lsb_row;

endmodule
