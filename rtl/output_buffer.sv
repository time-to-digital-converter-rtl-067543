// output_buffer -- holds the 8-bit MAC results of one bank until they are
// written back into the array.
//
// On a rising edge with load high the 32 results are captured and full is
// set; clear (asserted when the write-back has been issued) drops full. The
// stored values stay readable on data_out until the next load. A plain
// register bank; the published macro names the buffer without detailing it.
module output_buffer import tdc_cim_pkg::*; #(
  parameter int KERNELS_P = KERNELS
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            load,
  input  logic                            clear,
  input  logic [KERNELS_P-1:0][WBITS-1:0] data_in,
  output logic [KERNELS_P-1:0][WBITS-1:0] data_out,
  output logic                            full
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_out <= '0;
      full     <= 1'b0;
    end else if (load) begin
      data_out <= data_in;
      full     <= 1'b1;
    end else if (clear) begin
      full     <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(load && clear))
    else $error("output_buffer: load and clear together");

endmodule
