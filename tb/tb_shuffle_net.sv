// tb_shuffle_net: self-checking testbench of shuffle_net.
// Checks every sub-routing V_{k,k+1} of a length-64 network against the
// group/quarter description of the sub-shuffling matrices, checks the
// pass-through selection, and reproduces the length-8 example of the
// permutation pi = [m2 m0 m1]: V_{1,2} followed by V_{0,1} turns
// x0..x7 into x0 x4 x1 x5 x2 x6 x3 x7.
module tb_shuffle_net;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 64, NS = 6;
  logic [Q-1:0] din [N], dout [N];
  stage_t k;
  logic [Q-1:0] d8 [8], o8 [8];
  stage_t k8;
  int checks = 0, failures = 0;

  shuffle_net #(.N(N), .NS(NS), .W(Q)) dut (.din, .k, .dout);
  shuffle_net #(.N(8), .NS(3), .W(Q)) dut8 (.din(d8), .k(k8), .dout(o8));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int_q v, e;
    for (int rep = 0; rep < 20; rep++) begin
      v = {};
      for (int i = 0; i < N; i++) begin
        din[i] = Q'($urandom_range(127));
        v.push_back(int'(din[i]));
      end
      for (int kk = 0; kk < NS; kk++) begin
        k = stage_t'(kk);
        #1;
        e = (kk < NS-1) ? route(v, kk) : v;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (int'(dout[i]) != e[i]) failures++;
        end
      end
    end
    // length-8 example of the paper
    for (int i = 0; i < 8; i++) d8[i] = Q'(i);
    k8 = 1; #1;
    for (int i = 0; i < 8; i++) d8[i] = o8[i];
    k8 = 0; #1;
    begin
      static int exp8 [8] = '{0, 4, 1, 5, 2, 6, 3, 7};
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(o8[i]) != exp8[i]) begin
          failures++;
          $display("fig example mismatch at %0d: %0d", i, o8[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
