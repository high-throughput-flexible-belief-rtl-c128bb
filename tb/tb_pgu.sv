// tb_pgu: self-checking testbench of the permuted-graph generation unit
// (pgu) at N = 64, n = 6 with 16 PFG entries.
// For each PFG (original order, reversed order, random orders) the unit is
// started with random natural-order R_0 and L_n vectors. The testbench
// checks that the two output registers hold the natural vectors permuted by
// the modelled sub-routing sequence once done rises, that done rises n + 2T
// cycles after start (2*L_pi - n), and that the returned step list is the
// modelled decomposition.
module tb_pgu;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 64, NS = 6, LMAX = 16, MAXS = NS*(NS-1)/2;
  localparam int LW = $clog2(LMAX), CW = $clog2(MAXS+1);

  logic clk, rst_n;
  logic pfg_we;
  logic [LW-1:0] pfg_waddr, l;
  stage_t pfg_wdata [NS];
  logic start, abort, busy, done;
  llr_t r0_nat [N], ln_nat [N], reg_r0 [N], reg_ln [N];
  stage_t steps [MAXS];
  logic [CW-1:0] nsteps;
  int checks = 0, failures = 0;
  int_q pfgs [LMAX];

  pgu #(.N(N), .NS(NS), .LMAX(LMAX)) dut (.*);

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
    rst_n = 0; pfg_we = 0; start = 0; abort = 0; l = '0; pfg_waddr = '0;
    for (int e = 0; e < LMAX; e++) begin
      pfgs[e] = {};
      for (int s = 0; s < NS; s++) pfgs[e].push_back(s);
    end
    for (int s = 0; s < NS; s++) pfgs[1][s] = NS - 1 - s;
    for (int e = 2; e < LMAX; e++)
      for (int s = NS - 1; s > 0; s--) begin
        int r, t;
        r = $urandom_range(s);
        t = pfgs[e][s]; pfgs[e][s] = pfgs[e][r]; pfgs[e][r] = t;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < LMAX; e++) begin
      @(negedge clk);
      pfg_we = 1; pfg_waddr = LW'(e);
      for (int s = 0; s < NS; s++) pfg_wdata[s] = stage_t'(pfgs[e][s]);
    end
    @(negedge clk);
    pfg_we = 0;
    for (int rep = 0; rep < 3; rep++)
      for (int e = 0; e < LMAX; e++) begin
        int_q rs, vr, vl, er, el;
        int cyc;
        rs = decompose(pfgs[e]);
        vr = {}; vl = {};
        for (int i = 0; i < N; i++) begin
          r0_nat[i] = llr_t'($urandom_range(126) - 63);
          ln_nat[i] = llr_t'($urandom_range(126) - 63);
          vr.push_back(int'(r0_nat[i]));
          vl.push_back(int'(ln_nat[i]));
        end
        er = apply_steps(vr, rs);
        el = apply_steps(vl, rs);
        l = LW'(e); start = 1;
        @(negedge clk);
        start = 0;
        // inputs may change once the unit has captured them
        for (int i = 0; i < N; i++) begin r0_nat[i] = '0; ln_nat[i] = '0; end
        cyc = 0;
        while (!done && cyc < 200) begin @(negedge clk); cyc++; end
        chk(cyc == NS + 2 * rs.size(), $sformatf("PFG %0d latency %0d, expected %0d", e, cyc, NS + 2 * rs.size()));
        chk(int'(nsteps) == rs.size(), $sformatf("PFG %0d step count", e));
        foreach (rs[m]) chk(int'(steps[m]) == rs[m], $sformatf("PFG %0d step %0d", e, m));
        for (int i = 0; i < N; i++) begin
          chk(int'(reg_r0[i]) == er[i], $sformatf("PFG %0d R0 at %0d", e, i));
          chk(int'(reg_ln[i]) == el[i], $sformatf("PFG %0d Ln at %0d", e, i));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
