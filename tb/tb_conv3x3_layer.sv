// tb_conv3x3_layer -- runs one 3x3 convolution layer slice through the macro
// at its default size, in both IFM distribution modes.
//
// Part A, kernel parallelism (layers with many kernels, e.g. the 64-kernel
// 3x3 layers of ResNet-18): 64 kernels of one input channel are stored, 32
// per bank, in rows 0..8. An 8x8 IFM (unsigned 8-bit activations) is swept
// with stride 1; for each of the 36 output positions the patch is broadcast
// to both banks and one MAC with NoK = 32 and write-back computes all 64
// output channels. Output position p is written back into row 100+p, so the
// output feature map ends up stored in the array, ready to be the next
// layer's data; it is read back and checked at the end.
//
// Part B, input parallelism (layers with few kernels, e.g. the 6 kernels of
// LeNet-5's first layer): 6 kernels are stored in rows 9..17 of both banks;
// each MAC takes two output positions at once, one patch per bank, with
// NoK = 6.
//
// Every result is compared with the reference model of the quantised
// datapath (tb_ref_pkg); command latencies are checked. Only the 3x3,
// one-channel slice of each layer is run: summing over input channels and
// other kernel sizes are outside the macro. Weights are used as unsigned
// 8-bit values, as the datapath treats them. The watchdog ends the run with
// a failure if it stalls.
module tb_conv3x3_layer;
  import tdc_cim_pkg::*;
  import tb_ref_pkg::*;

  localparam int H = 8, W = 8, OH = H - 2, OW = W - 2;
  localparam int NK_A = 64, NK_B = 6, OFM_ROW = 100;

  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, rsp_valid;
  cmd_t cmd;
  logic [255:0] wdata, rdata;
  logic [8:0][7:0] ifm;
  logic [1:0][31:0][7:0] mac_result;
  logic [1:0] res_vsr, res_vdn, res_blpc;
  int checks = 0, failures = 0;
  int n_pos_a = 0, n_pos_b = 0, n_wb = 0;

  tdc_cim_top dut (.clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
                   .wdata(wdata), .ifm(ifm), .rsp_valid(rsp_valid), .rdata(rdata), .mac_result(mac_result),
                   .res_vsr(res_vsr), .res_vdn(res_vdn), .res_blpc(res_blpc));
  always #1 clk = ~clk;

  int fmap [H][W];
  int ka [NK_A][9];
  int kb [NK_B][9];
  int ofm [OH*OW][NK_A];      // expected 8-bit outputs of part A

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

  task automatic write_row(int b, int r, logic [255:0] d);
    cmd_t c;
    c = '0; c.op = OP_WRITE; c.bank = 4'(b); c.row = 8'(r); c.wmask = '1;
    wdata = d;
    issue(c, 5);
  endtask

  task automatic load(bit bcast, int b, int y, int x, output int p[9]);
    cmd_t c;
    for (int i = 0; i < 9; i++) begin
      p[i] = fmap[y + i / 3][x + i % 3];
      ifm[i] = 8'(p[i]);
    end
    c = '0; c.op = OP_LOAD_IFM; c.broadcast = bcast; c.bank = 4'(b);
    issue(c, 1);
  endtask

  task automatic check(int b, int k, int got, int p[9], int w[9], string what);
    int e;
    e = ref_out(ref_full(p, w));
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 10) $display("FAIL %s bank %0d slot %0d got %0d exp %0d", what, b, k, got, e);
    end
  endtask

  initial begin
    int p[9], p2[9];
    cmd_t c;
    logic [255:0] row;
    repeat (3) @(posedge clk); rst_n = 1;

    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) fmap[y][x] = $urandom_range(0, 255);
    for (int k = 0; k < NK_A; k++) for (int i = 0; i < 9; i++) ka[k][i] = $urandom_range(0, 255);
    for (int k = 0; k < NK_B; k++) for (int i = 0; i < 9; i++) kb[k][i] = $urandom_range(0, 255);

    // weights: kernel position i of kernel k -> row base+i, slot k (bank k/32 in part A)
    for (int b = 0; b < 2; b++) for (int i = 0; i < 9; i++) begin
      for (int k = 0; k < 32; k++) row[8*k +: 8] = 8'(ka[32*b + k][i]);
      write_row(b, i, row);
      row = '0;
      for (int k = 0; k < NK_B; k++) row[8*k +: 8] = 8'(kb[k][i]);
      write_row(b, 9 + i, row);
    end

    // part A: broadcast, 64 kernels, results written back as the output map
    for (int y = 0; y < OH; y++) for (int x = 0; x < OW; x++) begin
      int pos;
      pos = y * OW + x;
      load(1'b1, 0, y, x, p);
      c = '0; c.op = OP_MAC; c.row = 8'd0; c.nok = 6'd32; c.writeback = 1; c.dst_row = 8'(OFM_ROW + pos);
      issue(c, 8);
      n_pos_a++; n_wb++;
      for (int b = 0; b < 2; b++) for (int k = 0; k < 32; k++) begin
        check(b, k, int'(mac_result[b][k]), p, ka[32*b + k], "A");
        ofm[pos][32*b + k] = ref_out(ref_full(p, ka[32*b + k]));
      end
    end
    // the output feature map is now resident in the array
    for (int pos = 0; pos < OH*OW; pos++) for (int b = 0; b < 2; b++) begin
      c = '0; c.op = OP_READ; c.bank = 4'(b); c.row = 8'(OFM_ROW + pos);
      issue(c, 2);
      for (int k = 0; k < 32; k++) begin
        checks++;
        if (int'(rdata[8*k +: 8]) != ofm[pos][32*b + k]) begin
          failures++;
          if (failures < 10) $display("FAIL stored OFM pos %0d channel %0d", pos, 32*b + k);
        end
      end
    end

    // part B: one patch per bank, two output positions per MAC, 6 kernels
    for (int pos = 0; pos < OH*OW; pos += 2) begin
      load(1'b0, 0, pos / OW, pos % OW, p);
      load(1'b0, 1, (pos + 1) / OW, (pos + 1) % OW, p2);
      c = '0; c.op = OP_MAC; c.row = 8'd9; c.nok = 6'(NK_B); c.writeback = 0;
      issue(c, 3);
      n_pos_b += 2;
      for (int k = 0; k < NK_B; k++) begin
        check(0, k, int'(mac_result[0][k]), p,  kb[k], "B");
        check(1, k, int'(mac_result[1][k]), p2, kb[k], "B");
      end
    end

    checks++; if (n_pos_a != OH*OW || n_pos_b != OH*OW || n_wb == 0) failures++;
    $display("layer slices: A %0d positions x %0d kernels (broadcast, write-back), B %0d positions x %0d kernels (per-bank)",
             n_pos_a, NK_A, n_pos_b, NK_B);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
