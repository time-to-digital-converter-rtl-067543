// tb_input_buffer -- a loaded patch must come out as its LSB-nibble row and
// its MSB-nibble row, and be held while load is low.
module tb_input_buffer;
  logic clk = 0, rst_n = 0, load = 0, sel_msb = 0;
  logic [8:0][7:0] ifm, kept;
  logic [8:0][3:0] nib;
  int checks = 0, failures = 0;

  input_buffer dut (.clk(clk), .rst_n(rst_n), .load(load), .ifm(ifm), .sel_msb(sel_msb), .nibble(nib));
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < 9; i++) ifm[i] = 8'($urandom);
      kept = ifm;
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      for (int i = 0; i < 9; i++) ifm[i] = 8'($urandom);   // not loaded
      @(negedge clk);
      sel_msb = 0; #1;
      for (int i = 0; i < 9; i++) begin checks++; if (nib[i] != kept[i][3:0]) failures++; end
      sel_msb = 1; #1;
      for (int i = 0; i < 9; i++) begin checks++; if (nib[i] != kept[i][7:4]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
