// tb_output_buffer -- capture on load, hold otherwise, full set by load and
// cleared by clear.
module tb_output_buffer;
  logic clk = 0, rst_n = 0, load = 0, clear = 0;
  logic [31:0][7:0] din, dout, kept;
  logic full;
  int checks = 0, failures = 0;

  output_buffer dut (.clk(clk), .rst_n(rst_n), .load(load), .clear(clear), .data_in(din),
                     .data_out(dout), .full(full));
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); checks++; if (full) failures++;
    for (int t = 0; t < 100; t++) begin
      for (int k = 0; k < 32; k++) din[k] = 8'($urandom);
      kept = din;
      load = 1; @(negedge clk); load = 0;
      for (int k = 0; k < 32; k++) din[k] = 8'($urandom);
      checks++; if (!full || dout != kept) failures++;
      @(negedge clk);
      checks++; if (!full || dout != kept) failures++;
      clear = 1; @(negedge clk); clear = 0;
      checks++; if (full || dout != kept) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
