// tb_sram8t_array -- writes random rows with random column selects into the
// 256x256 array, keeps a shadow copy, and checks (a) single-row unit-pulse
// reads and (b) nine-row pulsed reads whose RBL discharge must equal
// sum_i code_i * Q[row_i][c] for every column.
module tb_sram8t_array;
  logic clk = 0;
  logic wwl_en = 0;
  logic [7:0] wwl_row;
  logic [255:0] wbl, wsel;
  logic [8:0][7:0] rwl_row;
  logic [8:0][3:0] rwl_code;
  logic [255:0][7:0] dis;
  logic [255:0] shadow [256];
  int checks = 0, failures = 0;

  sram8t_array dut (.clk(clk), .wwl_en(wwl_en), .wwl_row(wwl_row), .wbl(wbl), .wsel(wsel),
                    .rwl_row(rwl_row), .rwl_code(rwl_code), .rbl_dis(dis));
  always #5 clk = ~clk;

  task automatic wr(int r, logic [255:0] d, logic [255:0] m);
    @(negedge clk); wwl_en = 1; wwl_row = 8'(r); wbl = d; wsel = m;
    @(negedge clk); wwl_en = 0;
    for (int c = 0; c < 256; c++) if (m[c]) shadow[r][c] = d[c];
  endtask

  function automatic logic [255:0] rnd256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int r = 0; r < 256; r++) wr(r, rnd256(), '1);      // initialise every row
    for (int t = 0; t < 100; t++) wr($urandom_range(0, 255), rnd256(), rnd256());
    // single-row reads
    for (int t = 0; t < 64; t++) begin
      int r;
      r = $urandom_range(0, 255);
      rwl_code = '0; rwl_row = '0; rwl_row[0] = 8'(r); rwl_code[0] = 4'd1;
      #1;
      for (int c = 0; c < 256; c++) begin
        checks++;
        if (int'(dis[c]) != int'(shadow[r][c])) failures++;
      end
    end
    // nine pulsed rows
    for (int t = 0; t < 64; t++) begin
      int base;
      base = $urandom_range(0, 247);
      for (int i = 0; i < 9; i++) begin
        rwl_row[i] = 8'(base + i);
        rwl_code[i] = (t == 0) ? 4'd15 : 4'($urandom_range(0, 15));
      end
      #1;
      for (int c = 0; c < 256; c++) begin
        int e;
        e = 0;
        for (int i = 0; i < 9; i++) if (shadow[base + i][c]) e += int'(rwl_code[i]);
        checks++;
        if (int'(dis[c]) != e) begin
          failures++;
          if (failures < 5) $display("FAIL base=%0d c=%0d dis=%0d exp=%0d", base, c, dis[c], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
