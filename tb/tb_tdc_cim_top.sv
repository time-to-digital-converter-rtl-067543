// tb_tdc_cim_top -- end-to-end test of the macro at its default size
// (two 256x256 banks, 32 kernel slots per bank, 15-stage TDCs).
//
// Per round: random 8-bit 3x3 kernels are written into a random 9-row window
// of both banks with conventional row writes (D_in through the write
// drivers), read back with conventional reads, an IFM patch is loaded by
// broadcast or one patch per bank (mode switch), a MAC with a random NoK
// runs on both banks, the 8-bit results are compared with the reference
// (ideal analog transfer, 4-bit codes, 0/4/4/8 shifts), and the write-back
// row is read to check that active slots hold the results and inactive slots
// kept their old contents. The accept-to-response latency of every command
// is checked. Each mechanism is counted and must occur at least once.
module tb_tdc_cim_top;
  import tdc_cim_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, rsp_valid;
  cmd_t cmd;
  logic [255:0] wdata, rdata;
  logic [8:0][7:0] ifm;
  logic [1:0][31:0][7:0] mac_result;
  int checks = 0, failures = 0;
  int n_write = 0, n_read = 0, n_bcast = 0, n_ucast = 0, n_mac = 0, n_wb = 0;
  int n_partial_nok = 0, n_code15 = 0, n_code0 = 0;
  logic [1:0] res_vsr, res_vdn, res_blpc;
  int n_vsr [2] = '{0, 0};      // cycles with the inductor switch closed, per bank
  int n_vdn [2] = '{0, 0};
  int n_bank_wr [2] = '{0, 0};  // row writes (conventional and write-back) per bank

  tdc_cim_top dut (.clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
                   .wdata(wdata), .ifm(ifm), .rsp_valid(rsp_valid), .rdata(rdata), .mac_result(mac_result),
                   .res_vsr(res_vsr), .res_vdn(res_vdn), .res_blpc(res_blpc));
  always #1 clk = ~clk;     // 2 time units per cycle (0.5 GHz in the published macro)

  // Resonant write phases: every row write must close the inductor switch for
  // two cycles (recycle down and up) and pull down for one; precharge and
  // pull-down are never on together.
  always @(posedge clk) if (rst_n) begin
    for (int b = 0; b < 2; b++) begin
      if (res_vsr[b]) n_vsr[b]++;
      if (res_vdn[b]) n_vdn[b]++;
      if (res_vdn[b] && (res_blpc[b] || res_vsr[b])) begin
        failures++; $display("FAIL bank %0d pull-down overlaps precharge or recycling", b);
      end
    end
  end

  // shadow of both banks' arrays
  logic [255:0] shadow [2][256];
  int wt [2][32][9];          // weights of the current window
  int patch [2][9];           // IFM patch per bank

  task automatic issue(cmd_t c, int exp_lat);
    int lat;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk); #0.5 cmd_valid = 0; lat = 0;
    while (!rsp_valid && lat < 50) begin @(posedge clk); #0.5; lat++; end
    lat++;
    checks++;
    if (lat != exp_lat) begin failures++; $display("FAIL latency op=%0d %0d exp %0d", c.op, lat, exp_lat); end
  endtask

  function automatic logic [255:0] rnd256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic write_row(int b, int r, logic [255:0] d, logic [31:0] m);
    cmd_t c = '0;
    c.op = OP_WRITE; c.bank = 4'(b); c.row = 8'(r); c.wmask = m;
    wdata = d;
    issue(c, 5);
    for (int k = 0; k < 32; k++) if (m[k]) shadow[b][r][8*k +: 8] = d[8*k +: 8];
    n_write++; n_bank_wr[b]++;
  endtask

  task automatic read_check(int b, int r);
    cmd_t c = '0;
    c.op = OP_READ; c.bank = 4'(b); c.row = 8'(r);
    issue(c, 2);
    checks++;
    if (rdata != shadow[b][r]) begin failures++; $display("FAIL read bank %0d row %0d", b, r); end
    n_read++;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // initialise both arrays
    for (int b = 0; b < 2; b++) for (int r = 0; r < 256; r++) write_row(b, r, rnd256(), '1);
    for (int round = 0; round < 12; round++) begin
      int base, dst, nok;
      logic bcast;
      cmd_t c;
      base = $urandom_range(0, 247);
      dst  = $urandom_range(0, 255);
      while (dst >= base && dst < base + 9) dst = $urandom_range(0, 255);
      nok  = (round % 3 == 0) ? 32 : $urandom_range(1, 31);
      bcast = (round % 2 == 0);
      // kernels: round 1 uses full-scale weights to reach the code-15 end
      for (int b = 0; b < 2; b++) for (int k = 0; k < 32; k++) for (int i = 0; i < 9; i++)
        wt[b][k][i] = (round == 1) ? 255 : $urandom_range(0, 255);
      for (int b = 0; b < 2; b++) for (int i = 0; i < 9; i++) begin
        logic [255:0] row;
        for (int k = 0; k < 32; k++) row[8*k +: 8] = 8'(wt[b][k][i]);
        write_row(b, base + i, row, '1);
      end
      read_check(0, base + $urandom_range(0, 8));
      read_check(1, base + $urandom_range(0, 8));
      // IFM patches
      for (int b = 0; b < 2; b++) for (int i = 0; i < 9; i++)
        patch[b][i] = (round == 1) ? 255 : $urandom_range(0, 255);
      c = '0; c.op = OP_LOAD_IFM;
      if (bcast) begin
        for (int i = 0; i < 9; i++) patch[1][i] = patch[0][i];
        for (int i = 0; i < 9; i++) ifm[i] = 8'(patch[0][i]);
        c.broadcast = 1; issue(c, 1); n_bcast++;
      end else begin
        for (int b = 0; b < 2; b++) begin
          for (int i = 0; i < 9; i++) ifm[i] = 8'(patch[b][i]);
          c.broadcast = 0; c.bank = 4'(b); issue(c, 1); n_ucast++;
        end
      end
      // MAC with write-back
      c = '0; c.op = OP_MAC; c.row = 8'(base); c.dst_row = 8'(dst); c.nok = 6'(nok); c.writeback = 1;
      issue(c, 8);
      n_mac++; n_wb++; n_bank_wr[0]++; n_bank_wr[1]++;
      if (nok < 32) n_partial_nok++;
      for (int b = 0; b < 2; b++) begin
        for (int k = 0; k < 32; k++) begin
          int e, full;
          if (k < nok) begin
            full = ref_full(patch[b], wt[b][k]);
            e = ref_out(full);
            if (full == 15 * (1 + 16 + 16 + 256)) n_code15++;
            if (full == 0) n_code0++;
          end else e = 0;
          checks++;
          if (int'(mac_result[b][k]) != e) begin
            failures++;
            if (failures < 8) $display("FAIL round %0d bank %0d slot %0d got %0d exp %0d", round, b, k, mac_result[b][k], e);
          end
          if (k < nok) shadow[b][dst][8*k +: 8] = 8'(e);
        end
        read_check(b, dst);
      end
      // MAC without write-back on the same data: same results, nothing written
      c.writeback = 0; c.dst_row = 8'(base);
      issue(c, 3); n_mac++;
      for (int b = 0; b < 2; b++) read_check(b, base);
    end
    for (int b = 0; b < 2; b++) begin
      checks++;
      if (n_vsr[b] != 2 * n_bank_wr[b] || n_vdn[b] != n_bank_wr[b]) begin
        failures++;
        $display("FAIL bank %0d resonant phases: vsr=%0d vdn=%0d cycles for %0d writes", b, n_vsr[b], n_vdn[b], n_bank_wr[b]);
      end
    end
    // every mechanism must have happened
    checks++; if (n_write == 0 || n_read == 0) failures++;
    checks++; if (n_bcast == 0 || n_ucast == 0) begin failures++; $display("FAIL IFM mode switch not exercised"); end
    checks++; if (n_mac == 0 || n_wb == 0) failures++;
    checks++; if (n_partial_nok == 0) begin failures++; $display("FAIL NoK gating not exercised"); end
    checks++; if (n_code15 == 0) begin failures++; $display("FAIL TDC full-scale code not reached"); end
    checks++; if (n_vsr[0] + n_vsr[1] == 0) begin failures++; $display("FAIL no resonant recycling seen"); end
    $display("resonant recycling cycles: bank0=%0d bank1=%0d", n_vsr[0], n_vsr[1]);
    $display("mechanisms: writes=%0d reads=%0d bcast=%0d ucast=%0d macs=%0d writebacks=%0d partial_nok=%0d fullscale=%0d zero=%0d",
             n_write, n_read, n_bcast, n_ucast, n_mac, n_wb, n_partial_nok, n_code15, n_code0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
