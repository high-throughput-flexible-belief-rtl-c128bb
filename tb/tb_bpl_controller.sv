// tb_bpl_controller: self-checking testbench of the decoder controller at
// its default parameters (n = 10, LMAX = 128, I_max = 50).
// The BP unit, PGU, recovery and CRC around the controller are replaced by
// small timing models driven by a per-frame script: the number of
// iterations each PFG needs (or I_max), the number of sub-routings T of
// each PFG (PGU busy n + 2T cycles, recovery T cycles) and the PFG whose
// word passes the CRC (or none). The testbench checks
//   * the frame latency against the slot schedule
//       sum_{l=0..k} (1 + max((n-1)I_l + 1, n + 2T_{l+1}, T_{l-1})) + T_k,
//   * the PFG order given to the PGU (1, 2, ... on the right cycles) and
//     that the recovery receives the sub-routing count of its own PFG,
//   * the output PFG and CRC flag, that no PFG beyond the list is decoded,
//     that the controller stays not ready while the CRC table is built,
//   * and that SA stops, I_max stops, PGU and recovery stalls all occur.
module tb_bpl_controller;
  import bpl_pkg::*;
  localparam int NS = 10, LMAX = 128, IMAX = 50, MAXS = NS*(NS-1)/2;
  localparam int LW = $clog2(LMAX), LSW = $clog2(LMAX+1), CW = $clog2(MAXS+1), IW = 8;

  logic clk, rst_n;
  logic frame_start, ready, crc_busy;
  logic [LSW-1:0] list_size;
  logic bpu_start, bpu_run, bpu_iter_end, tdu_clear, tdu_sample, sa_term;
  logic [IW-1:0] bpu_iters;
  logic mem_load_nat, mem_load_pgu;
  logic pgu_start, pgu_abort, pgu_done;
  logic [LW-1:0] pgu_l;
  stage_t pgu_steps [MAXS], rec_steps [MAXS];
  logic [CW-1:0] pgu_nsteps, rec_nsteps;
  logic rec_start, rec_valid, crc_pass;
  logic out_valid, out_crc_ok;
  logic [LW-1:0] out_pfg;
  logic pfg_done, pfg_early, stall_pgu, stall_rec;

  int checks = 0, failures = 0;
  int n_early = 0, n_imax = 0, n_stall_pgu = 0, n_stall_rec = 0, n_pgu_starts = 0;

  // per-frame script
  int it_need [LMAX];     // iterations to SA convergence, 0 = never
  int tst [LMAX];         // sub-routing count of each PFG (tst[0] = 0)
  int pass_l;             // PFG that passes the CRC, -1 = none
  int exp_pgu_l;

  bpl_controller #(.NS(NS), .LMAX(LMAX), .IMAX(IMAX)) dut (.*);

  initial begin clk = 0; forever #5 clk = ~clk; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #50ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // BP unit timing model: iteration counter advancing on run
  int bc, bl;
  assign bpu_iter_end = bpu_run && bc == 0 && bpu_iters != 0;
  assign sa_term = tdu_sample && it_need[bl] != 0 && int'(bpu_iters) >= it_need[bl];
  always @(posedge clk) begin
    if (bpu_start) begin
      bc <= 0; bpu_iters <= '0;
      bl <= mem_load_nat ? 0 : bl + 1;
    end else if (bpu_run) begin
      if (bc == NS - 2) begin bc <= 0; bpu_iters <= bpu_iters + 1'b1; end
      else bc <= bc + 1;
    end
  end

  // PGU timing model
  int pc, pl;
  always @(posedge clk) begin
    if (pgu_abort) pc <= -1;
    else if (pgu_start) begin
      pc <= NS + 2 * tst[int'(pgu_l)];
      pl <= int'(pgu_l);
    end else if (pc > 0) pc <= pc - 1;
  end
  assign pgu_done = (pc == 0);
  always_comb begin
    for (int m = 0; m < MAXS; m++) pgu_steps[m] = stage_t'(m % NS);
    pgu_nsteps = CW'(tst[pl]);
  end

  // recovery timing model
  int rc;
  always @(posedge clk) begin
    if (rec_start) begin
      rc <= int'(rec_nsteps);
      chk(int'(rec_nsteps) == tst[int'(bl)], $sformatf("recovery of PFG %0d got %0d steps", bl, rec_nsteps));
    end else if (rc > 0) rc <= rc - 1;
  end
  // valid once the count has run out, as the recovery unit does
  logic rec_run;
  always @(posedge clk) rec_run <= rec_start ? 1'b1 : (out_valid ? 1'b0 : rec_run);
  assign rec_valid = rec_run && rc == 0;
  assign crc_pass = (int'(out_pfg) == pass_l);

  always @(posedge clk) if (rst_n) begin
    if (pfg_done) begin if (pfg_early) n_early++; else n_imax++; end
    if (stall_pgu) n_stall_pgu++;
    if (stall_rec) n_stall_rec++;
    if (pgu_start) begin
      n_pgu_starts++;
      chk(int'(pgu_l) == exp_pgu_l, $sformatf("PGU started on PFG %0d, expected %0d", pgu_l, exp_pgu_l));
      exp_pgu_l++;
    end
  end

  function automatic int imax2(int a, int b);
    return (a > b) ? a : b;
  endfunction

  task automatic frame(input int ls);
    int k, lat, cyc, exp_k;
    int iq [LMAX];
    for (int l = 0; l < ls; l++) iq[l] = (it_need[l] != 0 && it_need[l] <= IMAX) ? it_need[l] : IMAX;
    exp_k = (pass_l >= 0 && pass_l < ls) ? pass_l : ls - 1;
    lat = 0;
    for (int l = 0; l <= exp_k; l++) begin
      int s;
      s = (NS - 1) * iq[l] + 1;
      if (l + 1 < ls) s = imax2(s, NS + 2 * tst[l+1]);
      if (l > 0) s = imax2(s, tst[l-1]);
      lat += 1 + s;
    end
    lat += tst[exp_k];
    exp_pgu_l = 1;
    list_size = LSW'(ls);
    while (!ready) @(negedge clk);
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    cyc = 0;
    while (!out_valid && cyc < 100000) begin @(negedge clk); cyc++; end
    chk(cyc == lat, $sformatf("latency %0d expected %0d", cyc, lat));
    if (cyc != lat && failures < 3) begin
      $display("ls %0d k %0d pass %0d", ls, exp_k, pass_l);
      for (int l = 0; l <= exp_k + 1 && l < ls; l++) $display("  l %0d I %0d T %0d", l, iq[l], tst[l]);
    end
    chk(int'(out_pfg) == exp_k, $sformatf("output PFG %0d expected %0d", out_pfg, exp_k));
    chk(out_crc_ok == (pass_l >= 0 && pass_l < ls), "CRC flag");
    chk(exp_pgu_l <= imax2(ls, 2) && exp_pgu_l <= exp_k + 3, "PGU not started beyond the list");
    @(negedge clk);
    chk(ready, "ready after the frame");
  endtask

  initial begin
    rst_n = 0; frame_start = 0; crc_busy = 0; list_size = '0; pass_l = -1;
    bc = 0; bl = 0; bpu_iters = '0; pc = -1; pl = 0; rc = 0; rec_run = 0;
    for (int l = 0; l < LMAX; l++) begin it_need[l] = 0; tst[l] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // CRC table build blocks new frames
    crc_busy = 1;
    @(negedge clk);
    chk(!ready, "not ready while the CRC table is built");
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    chk(!mem_load_nat, "frame start ignored while busy");
    crc_busy = 0;
    @(negedge clk);
    chk(ready, "ready after the table build");
    for (int f = 0; f < 300; f++) begin
      int ls;
      ls = (f % 4 == 0) ? 1 : (f % 4 == 1) ? 8 : (f % 4 == 2) ? 32 : 128;
      for (int l = 0; l < LMAX; l++) begin
        it_need[l] = ($urandom_range(3) == 0) ? 0 : 3 + $urandom_range(($urandom_range(1) == 1) ? 3 : 40);
        tst[l] = (l == 0) ? 0 : $urandom_range(($urandom_range(1) == 1) ? 15 : 45);
      end
      pass_l = ($urandom_range(3) == 0) ? -1 : $urandom_range(ls + 1) - 1;
      frame(ls);
    end
    $display("SA stops %0d, I_max stops %0d, PGU stall cycles %0d, recovery stall cycles %0d",
             n_early, n_imax, n_stall_pgu, n_stall_rec);
    chk(n_early > 0 && n_imax > 0 && n_stall_pgu > 0 && n_stall_rec > 0 && n_pgu_starts > 0,
        "every mechanism occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
