// tb_readout -- drives 64 V_mac values per cycle over a two-cycle MAC and
// checks every kernel slot's 8-bit result against the ideal TDC transfer
// and the 0/4/4/8 shifts; also checks read sensing of the RBLs.
module tb_readout;
  import tdc_cim_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic tdc_clk, ff_rst;
  cim_phase_e phase = PH_IDLE;
  logic [63:0][9:0] vmac;
  logic [255:0][7:0] dis;
  logic [63:0][3:0] code;
  logic [31:0][7:0] res;
  logic [31:0][12:0] full;
  logic valid;
  logic [255:0] dout;
  int checks = 0, failures = 0;

  assign tdc_clk = en & ~clk;
  assign ff_rst  = en & clk;

  readout dut (.clk(clk), .rst_n(rst_n), .tdc_clk(tdc_clk), .ff_rst(ff_rst), .ff_en(1'b1),
               .phase(phase), .vmac_mv(vmac), .rbl_dis(dis), .tdc_code(code), .result(res),
               .result_full(full), .valid(valid), .dout(dout));
  always #5 clk = ~clk;

  initial begin
    int va[64], vb[64];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      for (int c = 0; c < 64; c++) begin
        va[c] = $urandom_range(150, 850); vb[c] = $urandom_range(150, 850);
      end
      @(posedge clk); #1 en = 1; phase = PH_LO;
      for (int c = 0; c < 64; c++) vmac[c] = 10'(va[c]);
      @(posedge clk); #1 phase = PH_HI;
      for (int c = 0; c < 64; c++) vmac[c] = 10'(vb[c]);
      @(negedge clk); #1;
      for (int k = 0; k < 32; k++) begin
        int e;
        e = ref_code_from_v(va[2*k]) + 16 * ref_code_from_v(va[2*k+1])
          + 16 * ref_code_from_v(vb[2*k]) + 256 * ref_code_from_v(vb[2*k+1]);
        checks++;
        if (!valid || int'(full[k]) != e || int'(res[k]) != ref_out(e)) begin
          failures++;
          if (failures < 5) $display("FAIL k=%0d full=%0d exp=%0d", k, full[k], e);
        end
      end
      @(posedge clk); #1 en = 0; phase = PH_IDLE;
      for (int c = 0; c < 256; c++) dis[c] = ($urandom_range(0, 1) == 1) ? 8'($urandom_range(1, 135)) : 8'd0;
      #1;
      for (int c = 0; c < 256; c++) begin
        checks++; if (dout[c] != (dis[c] != 0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
