// tb_resonant_write_driver -- for conventional (D_in) and CiM (Binary_out)
// writes checks the data multiplexer, the phase sequence
// vsr, vdn+WWL, vsr, blpc (one clock each), the column selects and done.
module tb_resonant_write_driver;
  logic clk = 0, rst_n = 0, start = 0, cim_en = 0;
  logic [255:0] din, bout, csel, wbl, wblb, wsel;
  logic vsr, vdn, blpc, wwl_en, busy, done;
  int checks = 0, failures = 0;

  resonant_write_driver dut (.clk(clk), .rst_n(rst_n), .start(start), .cim_en(cim_en), .din(din),
    .binary_out(bout), .col_sel(csel), .wbl(wbl), .wblb(wblb), .wsel(wsel), .vsr(vsr), .vdn(vdn),
    .blpc(blpc), .wwl_en(wwl_en), .busy(busy), .done(done));
  always #5 clk = ~clk;

  function automatic logic [255:0] rnd256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [255:0] exp_d, exp_s;
      logic c;
      c = 1'(t % 2);
      din = rnd256(); bout = rnd256(); csel = rnd256();
      exp_d = c ? bout : din; exp_s = csel;
      @(negedge clk); checks++; if (busy || !blpc || wbl != '1) failures++;
      start = 1; cim_en = c;
      @(negedge clk); start = 0; din = rnd256(); bout = rnd256(); csel = '0;   // latched at start
      checks++; if (!(vsr && !vdn && !wwl_en && !blpc && busy && wsel == exp_s && wbl == '1)) failures++;
      @(negedge clk);
      checks++; if (!(vdn && wwl_en && !vsr && wbl == exp_d && wblb == ~exp_d && wsel == exp_s)) begin
        failures++; $display("FAIL drive t=%0d", t); end
      @(negedge clk);
      checks++; if (!(vsr && !vdn && !wwl_en && wbl == '1)) failures++;
      @(negedge clk);
      checks++; if (!(blpc && done && !vsr && !vdn)) failures++;
      @(negedge clk);
      checks++; if (busy || done) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
