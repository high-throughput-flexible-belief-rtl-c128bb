// tb_pe_l: self-checking testbench of pe_l, the L-side PE: L_up' = g(L_up, L_dn + R_dn, 0), L_dn' = g(L_up, R_up, 0) + L_dn.
// Drives directed corner cases (zeros, saturation, offsets below one LSB)
// and random Q7.2 inputs and compares both outputs with an integer model.
module tb_pe_l;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  llr_t a, b, c, d, oa, ob;
  int checks = 0, failures = 0;

  pe_l dut (.l_up(a), .l_dn(b), .r_up(c), .r_dn(d), .o_up(oa), .o_dn(ob));

  task automatic check_one(input int ia, input int ib, input int ic, input int id);
    int ea, eb;
    a = llr_t'(ia); b = llr_t'(ib); c = llr_t'(ic); d = llr_t'(id);
    #1;
    ea = gref(int'(a), satq(int'(b) + int'(d)), 0); eb = satq(gref(int'(a), int'(c), 0) + int'(b));
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
