// tb_bp_unit: self-checking testbench of the double-column BP unit at
// N = 64, n = 6.
// A behavioural model of the same schedule runs beside the unit: in cycle c
// of an iteration the R row updates stage c (R_{c+1} from R_c and L_{c+1}) and
// the L row updates stage n-1-c (L_{n-1-c} from L_{n-c} and R_{n-1-c}), both
// reading the latest values written in earlier cycles. The testbench checks
//   * L_1 (output l1) against the model at every iteration end,
//   * that an iteration takes n-1 cycles of run and the iteration count,
//   * that cycles without run freeze the unit (random stalls),
//   * that a noiseless codeword of a random (64, 32) code is decoded: the
//     hard decisions HD(R_0 + L_0), with L_0 formed from L_1 by the testbench,
//     equal the transmitted u after a few iterations.
module tb_bp_unit;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 64, NS = 6, IW = 8;

  logic clk, rst_n, start, run, iter_end;
  logic [IW-1:0] iters;
  llr_t r0 [N], ln [N], l1 [N];
  int checks = 0, failures = 0;
  int mr [NS+1][N], ml [NS+1][N];

  bp_unit #(.N(N), .NS(NS), .IW(IW)) dut (.*);

  initial begin clk = 0; forever #5 clk = ~clk; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #20ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lo_idx(int p, int j);
    return ((p >> j) << (j + 1)) | (p & ((1 << j) - 1));
  endfunction

  // one model iteration of the double-column schedule
  task automatic model_iter();
    for (int c = 0; c <= NS - 2; c++) begin
      int nr [N], nl [N];
      int jr, jl;
      jr = c; jl = NS - 1 - c;
      for (int p = 0; p < N/2; p++) begin
        int a, b;
        a = lo_idx(p, jr); b = a + (1 << jr);
        nr[a] = gref(mr[jr][a], satq(ml[jr+1][b] + mr[jr][b]), 1);
        nr[b] = satq(gref(mr[jr][a], ml[jr+1][a], 1) + mr[jr][b]);
        a = lo_idx(p, jl); b = a + (1 << jl);
        nl[a] = gref(ml[jl+1][a], satq(ml[jl+1][b] + mr[jl][b]), 0);
        nl[b] = satq(gref(ml[jl+1][a], mr[jl][a], 0) + ml[jl+1][b]);
      end
      for (int i = 0; i < N; i++) begin mr[jr+1][i] = nr[i]; ml[jl][i] = nl[i]; end
    end
  endtask

  task automatic model_init();
    for (int s = 0; s <= NS; s++)
      for (int i = 0; i < N; i++) begin mr[s][i] = 0; ml[s][i] = 0; end
    for (int i = 0; i < N; i++) begin mr[0][i] = int'(r0[i]); ml[NS][i] = int'(ln[i]); end
  endtask

  // run nit iterations with random stalls, checking L_1 at every end
  task automatic run_iters(input int nit, input bit stalls, output int ncyc);
    int it, cyc;
    start = 1;
    @(negedge clk);
    start = 0;
    it = 0; cyc = 0;
    while (it < nit) begin
      run = !(stalls && $urandom_range(3) == 0);
      #1;
      if (run) begin
        if (iter_end) begin
          chk(0, "iteration end too early");
        end
        cyc++;
      end
      @(negedge clk);
      if (cyc == (NS - 1) * (it + 1) && run) begin
        it++;
        model_iter();
        // the next run cycle reports the end of iteration it
        run = 1; #1;
        chk(iter_end, $sformatf("iteration end after %0d run cycles", cyc));
        chk(int'(iters) == it, $sformatf("iteration count %0d expected %0d", iters, it));
        for (int i = 0; i < N; i++)
          chk(int'(l1[i]) == ml[1][i], $sformatf("L1[%0d] iteration %0d: %0d vs %0d", i, it, l1[i], ml[1][i]));
        if (it < nit) begin @(negedge clk); cyc++; end
      end
    end
    run = 0;
    ncyc = cyc;
  endtask

  initial begin
    int ncyc;
    int_q fz;
    rst_n = 0; start = 0; run = 0;
    for (int i = 0; i < N; i++) begin r0[i] = '0; ln[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // random channel values, frozen pattern from the construction
    fz = pw_frozen(N, N/2);
    for (int rep = 0; rep < 6; rep++) begin
      for (int i = 0; i < N; i++) begin
        r0[i] = (fz[i] != 0) ? llr_t'(63) : llr_t'(0);
        ln[i] = llr_t'($urandom_range(126) - 63);
      end
      model_init();
      run_iters(8, rep[0], ncyc);
    end
    // noiseless decoding
    for (int rep = 0; rep < 10; rep++) begin
      int_q u, x;
      logic [N-1:0] hdv;
      int nerr;
      u = {};
      for (int i = 0; i < N; i++) u.push_back((fz[i] != 0) ? 0 : $urandom_range(1));
      x = encode(u);
      for (int i = 0; i < N; i++) begin
        r0[i] = (fz[i] != 0) ? llr_t'(63) : llr_t'(0);
        ln[i] = (x[i] != 0) ? llr_t'(-8) : llr_t'(8);
      end
      model_init();
      run_iters(6, 0, ncyc);
      nerr = 0;
      for (int p = 0; p < N/2; p++) begin
        int a0, a1;
        a0 = gref(int'(l1[2*p]), satq(int'(l1[2*p+1]) + int'(r0[2*p+1])), 0);
        a1 = satq(gref(int'(l1[2*p]), int'(r0[2*p]), 0) + int'(l1[2*p+1]));
        hdv[2*p]   = satq(int'(r0[2*p]) + a0) < 0;
        hdv[2*p+1] = satq(int'(r0[2*p+1]) + a1) < 0;
      end
      for (int i = 0; i < N; i++) if (hdv[i] != u[i][0]) nerr++;
      chk(nerr == 0, $sformatf("noiseless decoding left %0d bit errors", nerr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
