// tb_cap_array -- random RBL discharges; V_mac must follow the binary-weighted
// charge-sharing sum, and stay at the top of the range with col_mux open.
module tb_cap_array;
  import tb_ref_pkg::*;
  logic            col_mux;
  logic [3:0][7:0] dis;
  logic [9:0]      vmac;
  int checks = 0, failures = 0;

  cap_array dut (.col_mux(col_mux), .rbl_dis(dis), .vmac_mv(vmac));

  initial begin
    for (int t = 0; t < 400; t++) begin
      int s;
      for (int b = 0; b < 4; b++) dis[b] = 8'($urandom_range(0, 135));
      if (t < 16) for (int b = 0; b < 4; b++) dis[b] = (t == 15) ? 8'd135 : 8'(t * 9);
      s = int'(dis[0]) + 2 * int'(dis[1]) + 4 * int'(dis[2]) + 8 * int'(dis[3]);
      col_mux = 1; #1;
      checks++;
      if (int'(vmac) != ref_vmac(s)) begin
        failures++;
        $display("FAIL s=%0d v=%0d exp=%0d", s, vmac, ref_vmac(s));
      end
      col_mux = 0; #1;
      checks++;
      if (vmac != 10'd800) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
