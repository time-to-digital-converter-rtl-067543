// tb_main_control -- sends every command kind with a stand-in write driver
// (done four cycles after start) and checks the accept-to-response latency
// (LOAD 1, READ 2, WRITE 5, MAC 3, MAC with write-back 8 cycles), the MAC
// phase sequence, the TDC enable, the IFM load and write-start bank masks.
module tb_main_control;
  import tdc_cim_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, rwd_done;
  cmd_t cmd;
  cim_phase_e phase;
  logic tdc_en_next, cim, rwd_cim_en, obuf_load, read_sample, rsp_valid;
  rwl_mode_e rwl_mode;
  logic [7:0] rwl_row, wr_row;
  logic [5:0] nok;
  logic [31:0] wmask;
  logic [1:0] ifm_load, rwd_start, bank_sel;
  int checks = 0, failures = 0;
  int rwd_cnt = 0;
  string trace;

  main_control dut (.clk(clk), .rst_n(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd(cmd),
    .rwd_done(rwd_done), .phase(phase), .tdc_en_next(tdc_en_next), .rwl_mode(rwl_mode), .rwl_row(rwl_row),
    .cim(cim), .nok(nok), .wmask(wmask), .wr_row(wr_row), .ifm_load(ifm_load), .rwd_start(rwd_start),
    .rwd_cim_en(rwd_cim_en), .obuf_load(obuf_load), .bank_sel(bank_sel), .read_sample(read_sample),
    .rsp_valid(rsp_valid));
  always #5 clk = ~clk;

  // stand-in write driver: busy for four cycles, done in the last
  assign rwd_done = (rwd_cnt == 4);
  always @(posedge clk) begin
    if (rwd_start != 0) rwd_cnt <= 1;
    else if (rwd_cnt == 4) rwd_cnt <= 0;
    else if (rwd_cnt != 0) rwd_cnt <= rwd_cnt + 1;
  end

  // one letter per cycle: phase L/H, tdc enable (registered) e
  logic en_q;
  always @(posedge clk) en_q <= tdc_en_next;

  task automatic run(cmd_t c, int exp_lat, logic [1:0] exp_load, logic [1:0] exp_start, string exp_trace);
    int lat;
    @(negedge clk); cmd = c; cmd_valid = 1;
    #1;
    checks++;
    if (!cmd_ready || ifm_load != exp_load || rwd_start != (c.op == OP_WRITE ? exp_start : 2'b00)) begin
      failures++; $display("FAIL accept op=%0d load=%b start=%b ready=%b st=%0d t=%0t", c.op, ifm_load, rwd_start, cmd_ready, dut.state, $time);
    end
    @(posedge clk); #1 cmd_valid = 0; lat = 0; trace = "";
    while (1) begin
      trace = {trace, phase == PH_LO ? "L" : phase == PH_HI ? "H" : "."};
      if (phase != PH_IDLE) begin checks++; if (!en_q || rwl_mode != RWL_CIM) failures++; end
      if (rwd_start != 0) begin
        checks++; if (rwd_start != exp_start || !rwd_cim_en || wr_row != c.dst_row) failures++;
      end
      lat++;
      if (rsp_valid) break;
      @(posedge clk); #1;
      if (lat > 20) break;
    end
    @(posedge clk);                         // leave the response cycle
    checks++;
    if (lat != exp_lat || trace != exp_trace) begin
      failures++; $display("FAIL op=%0d latency %0d exp %0d trace %s exp %s", c.op, lat, exp_lat, trace, exp_trace);
    end
  endtask

  initial begin
    cmd_t c;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      c = '0; c.bank = 4'(t & 1); c.row = 8'($urandom_range(0, 247)); c.dst_row = 8'($urandom_range(0, 255));
      c.nok = 6'($urandom_range(1, 32)); c.wmask = $urandom;
      c.op = OP_LOAD_IFM; c.broadcast = 1; run(c, 1, 2'b11, 2'b00, ".");
      c.op = OP_LOAD_IFM; c.broadcast = 0; run(c, 1, (t & 1) ? 2'b10 : 2'b01, 2'b00, ".");
      c.op = OP_WRITE; run(c, 5, 2'b00, (t & 1) ? 2'b10 : 2'b01, ".....");
      c.op = OP_READ;  run(c, 2, 2'b00, 2'b00, "..");
      c.op = OP_MAC; c.writeback = 0; run(c, 3, 2'b00, 2'b00, "LH.");
      c.op = OP_MAC; c.writeback = 1; run(c, 8, 2'b00, 2'b11, "LH......");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
