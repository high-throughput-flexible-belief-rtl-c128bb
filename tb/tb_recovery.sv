// tb_recovery: self-checking testbench of the recovery unit at N = 64, n = 6.
// A random u in natural order is permuted by the sub-routing sequence of a
// random PFG (the order in which the decoder would see it); the unit must
// undo the sequence and return the natural-order u, raising valid T cycles
// after start (T = number of sub-routings; on the same edge when T = 0),
// with busy high in between.
module tb_recovery;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 64, NS = 6, MAXS = NS*(NS-1)/2, CW = $clog2(MAXS+1);

  logic clk, rst_n, start, valid, busy;
  logic [N-1:0] u_in, u_out;
  stage_t steps [MAXS];
  logic [CW-1:0] nsteps;
  int checks = 0, failures = 0;

  recovery #(.N(N), .NS(NS)) dut (.*);

  initial begin clk = 0; forever #5 clk = ~clk; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #10ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; u_in = '0; nsteps = '0;
    for (int m = 0; m < MAXS; m++) steps[m] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 200; rep++) begin
      int_q pfg, rs, un, up;
      int cyc;
      pfg = {};
      for (int s = 0; s < NS; s++) pfg.push_back(s);
      if (rep > 0)
        for (int s = NS - 1; s > 0; s--) begin
          int r, t;
          r = $urandom_range(s);
          t = pfg[s]; pfg[s] = pfg[r]; pfg[r] = t;
        end
      rs = decompose(pfg);
      un = {};
      for (int i = 0; i < N; i++) un.push_back($urandom_range(1));
      up = apply_steps(un, rs);
      for (int i = 0; i < N; i++) u_in[i] = up[i][0];
      for (int m = 0; m < MAXS; m++) steps[m] = (m < rs.size()) ? stage_t'(rs[m]) : stage_t'(0);
      nsteps = CW'(rs.size());
      start = 1;
      @(negedge clk);
      start = 0;
      u_in = ~u_in;   // must not matter after start
      cyc = 0;
      while (!valid && cyc < 100) begin
        chk(busy, "busy while recovering");
        @(negedge clk); cyc++;
      end
      chk(cyc == rs.size(), $sformatf("valid after %0d cycles, expected %0d", cyc, rs.size()));
      for (int i = 0; i < N; i++) chk(u_out[i] == un[i][0], $sformatf("bit %0d of trial %0d", i, rep));
      chk(!busy, "idle when valid");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
