// tb_rwl_drivers -- off: no pulses; read: one unit pulse on the read row;
// CiM: nine consecutive rows from the window base carrying the nibbles.
module tb_rwl_drivers;
  import tdc_cim_pkg::*;
  rwl_mode_e mode;
  logic [7:0] rrow, base;
  logic [8:0][3:0] nib, code;
  logic [8:0][7:0] row;
  int checks = 0, failures = 0;

  rwl_drivers dut (.mode(mode), .read_row(rrow), .win_base(base), .nibble(nib),
                   .rwl_row(row), .rwl_code(code));

  initial begin
    for (int t = 0; t < 300; t++) begin
      rrow = 8'($urandom_range(0, 255)); base = 8'($urandom_range(0, 247));
      for (int i = 0; i < 9; i++) nib[i] = 4'($urandom_range(0, 15));
      mode = RWL_OFF; #1;
      checks++; if (code != '0) failures++;
      mode = RWL_READ; #1;
      checks++;
      if (row[0] != rrow || code[0] != 4'd1 || code[8:1] != '0) failures++;
      mode = RWL_CIM; #1;
      for (int i = 0; i < 9; i++) begin
        checks++;
        if (int'(row[i]) != int'(base) + i || code[i] != nib[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
