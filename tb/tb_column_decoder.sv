// tb_column_decoder -- every NoK 0..32 in CiM mode (col_mux and write select
// of slots below NoK only) and random byte masks in write mode.
module tb_column_decoder;
  logic cim;
  logic [5:0] nok;
  logic [31:0] wmask;
  logic [63:0] col_mux;
  logic [255:0] wsel;
  int checks = 0, failures = 0;

  column_decoder dut (.cim(cim), .nok(nok), .wmask(wmask), .col_mux(col_mux), .wsel(wsel));

  initial begin
    for (int n = 0; n <= 32; n++) begin
      cim = 1; nok = 6'(n); wmask = $urandom; #1;
      for (int c = 0; c < 64; c++) begin
        checks++; if (col_mux[c] != (c / 2 < n)) failures++;
      end
      for (int c = 0; c < 256; c++) begin
        checks++; if (wsel[c] != (c / 8 < n)) failures++;
      end
    end
    for (int t = 0; t < 50; t++) begin
      cim = 0; nok = 6'($urandom_range(0, 32)); wmask = $urandom; #1;
      checks++; if (col_mux != '0) failures++;
      for (int c = 0; c < 256; c++) begin
        checks++; if (wsel[c] != wmask[c / 8]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
