// tb_shift_add -- random code pairs over two cycles; checks the shifted sum
// lo1 + 16 hi1 + 16 lo2 + 256 hi2, the 8-bit result and that valid is high
// exactly in the second cycle.
module tb_shift_add;
  import tdc_cim_pkg::*;
  logic clk = 0, rst_n = 0;
  cim_phase_e phase = PH_IDLE;
  logic [3:0] lo, hi;
  logic valid;
  logic [12:0] full;
  logic [7:0]  out;
  int checks = 0, failures = 0;

  shift_add dut (.clk(clk), .rst_n(rst_n), .phase(phase), .code_lo(lo), .code_hi(hi),
                 .valid(valid), .mac_full(full), .binary_out(out));
  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int l1, h1, l2, h2, exp;
      l1 = (t == 0) ? 15 : $urandom_range(0, 15); h1 = (t == 0) ? 15 : $urandom_range(0, 15);
      l2 = (t == 0) ? 15 : $urandom_range(0, 15); h2 = (t == 0) ? 15 : $urandom_range(0, 15);
      @(negedge clk); phase = PH_LO; lo = 4'(l1); hi = 4'(h1);
      #1 checks++; if (valid) failures++;
      @(negedge clk); phase = PH_HI; lo = 4'(l2); hi = 4'(h2);
      #1;
      exp = l1 + 16 * h1 + 16 * l2 + 256 * h2;
      checks++;
      if (!valid || int'(full) != exp || int'(out) != ((exp / 32 > 255) ? 255 : exp / 32)) begin
        failures++;
        $display("FAIL %0d %0d %0d %0d full=%0d exp=%0d out=%0d", l1, h1, l2, h2, full, exp, out);
      end
      @(negedge clk); phase = PH_IDLE;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
