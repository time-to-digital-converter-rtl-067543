// tb_cim_bank -- one bank driven directly: weights written through the write
// drivers (conventional, D_in), two-cycle MAC with the TDC clock derived as
// in the macro, results checked against the reference, write-back
// (cim_en = 1) of the active kernel slots checked with conventional reads.
module tb_cim_bank;
  import tdc_cim_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic tdc_clk, ff_rst;
  cim_phase_e phase = PH_IDLE;
  rwl_mode_e mode = RWL_OFF;
  logic [7:0] rwl_row = 0, wr_row = 0;
  logic [8:0][3:0] nib;
  logic cim = 0, rwd_start = 0, rwd_cim_en = 0, obuf_load = 0;
  logic [5:0] nok = 0;
  logic [31:0] wmask = '1;
  logic [255:0] din, dout;
  logic [31:0][7:0] obuf;
  logic [31:0][12:0] rfull;
  logic [63:0][3:0] codes;
  logic busy, done, vsr, vdn, blpc;
  int checks = 0, failures = 0;
  int wt[32][9], x[9];

  assign tdc_clk = en & ~clk;
  assign ff_rst  = en & clk;

  cim_bank dut (.clk(clk), .rst_n(rst_n), .tdc_clk(tdc_clk), .ff_rst(ff_rst), .ff_en(1'b1), .phase(phase),
    .rwl_mode(mode), .rwl_row(rwl_row), .nibble(nib), .cim(cim), .nok(nok), .wmask(wmask), .wr_row(wr_row),
    .rwd_start(rwd_start), .rwd_cim_en(rwd_cim_en), .obuf_load(obuf_load), .din(din), .dout(dout),
    .obuf_data(obuf), .result_full(rfull), .tdc_code(codes), .rwd_busy(busy), .rwd_done(done),
    .rwd_vsr(vsr), .rwd_vdn(vdn), .rwd_blpc(blpc));
  always #5 clk = ~clk;

  task automatic wr(int r, logic [255:0] d, logic c);
    @(negedge clk); wr_row = 8'(r); din = d; cim = c; rwd_cim_en = c; rwd_start = 1;
    @(negedge clk); rwd_start = 0;
    while (!done) @(negedge clk);
    @(negedge clk); cim = 0; rwd_cim_en = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 8; t++) begin
      int base, dst, n;
      logic [255:0] old;
      base = $urandom_range(0, 247); dst = (base + 100) % 256; n = $urandom_range(1, 32);
      for (int k = 0; k < 32; k++) for (int i = 0; i < 9; i++) wt[k][i] = (t == 0) ? 255 : $urandom_range(0, 255);
      for (int i = 0; i < 9; i++) x[i] = (t == 0) ? 255 : $urandom_range(0, 255);
      for (int i = 0; i < 9; i++) begin
        logic [255:0] row;
        for (int k = 0; k < 32; k++) row[8*k +: 8] = 8'(wt[k][i]);
        wr(base + i, row, 0);
      end
      old = '0; for (int i = 0; i < 8; i++) old[32*i +: 32] = $urandom;
      wr(dst, old, 0);
      // MAC
      @(negedge clk); cim = 1; nok = 6'(n);
      @(posedge clk); #1 en = 1; phase = PH_LO; mode = RWL_CIM; rwl_row = 8'(base);
      for (int i = 0; i < 9; i++) nib[i] = 4'(x[i] % 16);
      @(posedge clk); #1 phase = PH_HI; obuf_load = 1;
      for (int i = 0; i < 9; i++) nib[i] = 4'(x[i] / 16);
      @(posedge clk); #1 en = 0; phase = PH_IDLE; mode = RWL_OFF; obuf_load = 0;
      for (int k = 0; k < 32; k++) begin
        int e;
        e = (k < n) ? ref_out(ref_full(x, wt[k])) : 0;
        checks++;
        if (int'(obuf[k]) != e) begin
          failures++; if (failures < 5) $display("FAIL t=%0d k=%0d got %0d exp %0d", t, k, obuf[k], e);
        end
      end
      // write-back and read
      wr(dst, '0, 1);
      @(negedge clk); mode = RWL_READ; rwl_row = 8'(dst); #1;
      for (int k = 0; k < 32; k++) begin
        checks++;
        if (dout[8*k +: 8] != ((k < n) ? obuf[k] : old[8*k +: 8])) failures++;
      end
      mode = RWL_OFF;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
