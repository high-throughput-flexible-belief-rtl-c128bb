// tb_bsu: self-checking testbench of the basic-sub-routing unit (bsu) at
// the default size N = 1024, n = 10, 128 PFG entries.
// It loads PFG stage orders into the PFG memory (the original order, the
// fully reversed order, the paper's example [m2 m0 m1 ...] and random
// orders whose left four stages are fixed, as in the p = 4 setting), starts
// the unit on each and checks:
//   * the step list against an independent model of the decomposition;
//   * the latency from start to done, which must be n + 2T cycles
//     (T = number of sub-routings), i.e. 2*L_pi - n of the paper: 10 for
//     the original order, 100 for the reversed order and at most 40 for
//     the p = 4 orders;
//   * the data routed through the network into two operand registers kept
//     by the testbench (wr_a then wr_b), against the modelled permutation;
//   * that abort returns the unit to idle.
module tb_bsu;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 1024, NS = 10, LMAX = 128, MAXS = NS*(NS-1)/2;
  localparam int LW = $clog2(LMAX), CW = $clog2(MAXS+1);

  logic clk = 0, rst_n = 0;
  logic pfg_we = 0;
  logic [LW-1:0] pfg_waddr = '0;
  stage_t pfg_wdata [NS];
  logic start = 0, abort = 0;
  logic [LW-1:0] l = '0;
  logic busy, done, wr_a, wr_b;
  logic [Q-1:0] din [N], dout [N];
  logic [Q-1:0] reg_a [N], reg_b [N];
  stage_t steps [MAXS];
  logic [CW-1:0] nsteps;
  int checks = 0, failures = 0;
  int_q pfgs [LMAX];

  bsu #(.N(N), .NS(NS), .LMAX(LMAX)) dut (.*);

  always #5 clk = ~clk;
  always_comb for (int i = 0; i < N; i++) din[i] = wr_b ? reg_b[i] : reg_a[i];
  always_ff @(posedge clk) begin
    if (wr_a) reg_a <= dout;
    if (wr_b) reg_b <= dout;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #50ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input int idx, output int lat);
    int_q ref_steps, va, vb, ea, eb;
    int cyc;
    ref_steps = decompose(pfgs[idx]);
    va = {}; vb = {};
    for (int i = 0; i < N; i++) begin
      reg_a[i] = Q'($urandom_range(127));
      reg_b[i] = Q'($urandom_range(127));
      va.push_back(int'(reg_a[i]));
      vb.push_back(int'(reg_b[i]));
    end
    @(negedge clk);
    l = LW'(idx); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 1000) begin @(negedge clk); cyc++; end
    lat = cyc;
    chk(lat == NS + 2 * ref_steps.size(),
        $sformatf("PFG %0d latency %0d expected %0d", idx, lat, NS + 2 * ref_steps.size()));
    chk(int'(nsteps) == ref_steps.size(), $sformatf("PFG %0d nsteps %0d", idx, nsteps));
    foreach (ref_steps[m]) chk(int'(steps[m]) == ref_steps[m], $sformatf("PFG %0d step %0d", idx, m));
    ea = apply_steps(va, ref_steps);
    eb = apply_steps(vb, ref_steps);
    for (int i = 0; i < N; i++) begin
      chk(int'(reg_a[i]) == ea[i] && int'(reg_b[i]) == eb[i],
          $sformatf("PFG %0d data at %0d", idx, i));
    end
    chk(!busy, "busy while done");
  endtask

  initial begin
    int lat, maxlat;
    // PFG contents
    for (int e = 0; e < LMAX; e++) begin
      pfgs[e] = {};
      for (int s = 0; s < NS; s++) pfgs[e].push_back(s);
    end
    for (int s = 0; s < NS; s++) pfgs[1][s] = NS - 1 - s;
    pfgs[2][0] = 2; pfgs[2][1] = 0; pfgs[2][2] = 1;
    for (int e = 3; e < LMAX; e++)
      for (int s = NS - 1; s > 4; s--) begin
        int r, t;
        r = 4 + $urandom_range(s - 4);
        t = pfgs[e][s]; pfgs[e][s] = pfgs[e][r]; pfgs[e][r] = t;
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < LMAX; e++) begin
      @(negedge clk);
      pfg_we = 1; pfg_waddr = LW'(e);
      for (int s = 0; s < NS; s++) pfg_wdata[s] = stage_t'(pfgs[e][s]);
    end
    @(negedge clk);
    pfg_we = 0;

    run_one(0, lat);
    chk(lat == 10, $sformatf("original order latency %0d", lat));
    run_one(1, lat);
    chk(lat == 100, $sformatf("reversed order latency %0d", lat));
    chk(nsteps == 45, "reversed order step count");
    run_one(2, lat);
    chk(nsteps == 2 && steps[0] == 1 && steps[1] == 0, "example [m2 m0 m1] gives V12 then V01");
    maxlat = 0;
    for (int e = 3; e < LMAX; e++) begin
      run_one(e, lat);
      if (lat > maxlat) maxlat = lat;
    end
    chk(maxlat <= 40, $sformatf("p=4 maximum latency %0d", maxlat));

    // abort in the middle of a permutation
    @(negedge clk);
    l = 1; start = 1;
    @(negedge clk);
    start = 0;
    repeat (20) @(negedge clk);
    chk(busy, "busy during permutation");
    abort = 1;
    @(negedge clk);
    abort = 0;
    chk(!busy && !done, "abort returns to idle");
    repeat (5) @(negedge clk);
    chk(!busy && !done, "stays idle after abort");

    $display("p=4 maximum permutation latency %0d cycles", maxlat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
