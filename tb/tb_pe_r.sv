// tb_pe_r: self-checking testbench of pe_r, the R-side PE: R_up' = g(R_up, L_dn + R_dn, 0.25), R_dn' = g(R_up, L_up, 0.25) + R_dn.
// Drives directed corner cases (zeros, saturation, offsets below one LSB)
// and random Q7.2 inputs and compares both outputs with an integer model.
module tb_pe_r;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  llr_t a, b, c, d, oa, ob;
  int checks = 0, failures = 0;

  pe_r dut (.r_up(a), .r_dn(b), .l_up(c), .l_dn(d), .o_up(oa), .o_dn(ob));

  task automatic check_one(input int ia, input int ib, input int ic, input int id);
    int ea, eb;
    a = llr_t'(ia); b = llr_t'(ib); c = llr_t'(ic); d = llr_t'(id);
    #1;
    ea = gref(int'(a), satq(int'(d) + int'(b)), 1); eb = satq(gref(int'(a), int'(c), 1) + int'(b));
    checks++;
    if (int'(oa) != ea || int'(ob) != eb) begin
      failures++;
      if (failures < 10) $display("MISMATCH in=%0d %0d %0d %0d out=%0d %0d exp=%0d %0d",
                                   ia, ib, ic, id, oa, ob, ea, eb);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one(0, 0, 0, 0);
    check_one(63, 63, 63, 63);
    check_one(-63, -63, -63, -63);
    check_one(1, -1, 1, -1);
    check_one(5, 0, -7, 3);
    check_one(-2, 40, 30, 30);
    check_one(63, -5, 1, 0);
    for (int t = 0; t < 3000; t++)
      check_one($urandom_range(126) - 63, $urandom_range(126) - 63,
                $urandom_range(126) - 63, $urandom_range(126) - 63);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
