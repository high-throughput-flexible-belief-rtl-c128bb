// tb_bpl_decoder: end-to-end self-checking testbench of the BPL decoder at
// a reduced size, N = 128 (n = 7), list sizes up to 16, I_max = 50.
// A (128, 53+11) polar code with CRC-11 is built with the polarization-weight
// construction; PFG entries are random stage orders (entry 1 the fully
// reversed order). Frames of random messages are BPSK-modulated, sent over
// an AWGN channel at several Eb/N0 values, quantised to Q7.2 and decoded.
// The testbench checks:
//   * every word the decoder marks CRC-correct equals the transmitted u;
//   * noiseless frames are decoded on PFG 0;
//   * the latency of every frame, from frame_start to dec_valid, equals the
//     slot schedule of the design: for slots l = 0..k (k = PFG whose word is
//     output)  S_l = 1 + max((n-1)*I_l + 1, n + 2*T_{l+1}, T_{l-1}) (the
//     terms present only when PFG l+1 / l-1 exists), plus T_k for the last
//     recovery, where I_l is reported by the decoder and T_l is the number
//     of sub-routings of PFG l from the testbench's own decomposition;
//   * that every mechanism occurred at least once: SA early termination,
//     termination at I_max, a list change to the next PFG, a PGU stall, a
//     recovery stall, CRC success on PFG 0, CRC success on a later PFG,
//     early exit before the end of the list, and a frame with every PFG
//     failing.
module tb_bpl_decoder;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 128, NS = 7, LMAX = 16, IMAX = 50;
  localparam int LW = $clog2(LMAX), LSW = $clog2(LMAX+1), IW = 8;
  localparam int KINFO = 53;

  logic clk, rst_n;
  logic [N-1:0] frozen;
  logic cfg_build, pfg_we;
  logic [LW-1:0] pfg_waddr;
  stage_t pfg_wdata [NS];
  logic [LSW-1:0] list_size;
  logic ready, frame_start;
  llr_t llr_in [N];
  logic dec_valid, dec_crc_ok;
  logic [N-1:0] dec_u;
  logic [LW-1:0] dec_pfg;
  logic pfg_done, pfg_early, stall_pgu, stall_rec, list_change;
  logic [IW-1:0] pfg_iters;

  int checks = 0, failures = 0;
  int n_early = 0, n_imax = 0, n_change = 0, n_stall_pgu = 0, n_stall_rec = 0;
  int n_ok0 = 0, n_ok_later = 0, n_early_exit = 0, n_allfail = 0;
  int_q iters_q;
  int_q tsteps [LMAX];
  int_q fz;

  bpl_decoder #(.N(N), .NS(NS), .LMAX(LMAX), .IMAX(IMAX)) dut (.*);

  // A second decoder with I_max = 3 decodes the same frames. With so few
  // iterations per PFG the BP unit finishes a PFG before the recovery of a
  // long sub-routing program, so this instance exercises the recovery stall.
  localparam int IMAX2 = 3;
  logic ready2, dec_valid2, dec_crc_ok2, pfg_done2, pfg_early2, stall_pgu2, stall_rec2, list_change2;
  logic [N-1:0] dec_u2;
  logic [LW-1:0] dec_pfg2;
  logic [IW-1:0] pfg_iters2;
  int_q iters2_q;
  int n_stall_rec2 = 0;
  int n_undetected = 0, n_crc_words = 0;

  bpl_decoder #(.N(N), .NS(NS), .LMAX(LMAX), .IMAX(IMAX2)) dut2 (
    .clk, .rst_n, .frozen, .cfg_build, .pfg_we, .pfg_waddr, .pfg_wdata, .list_size,
    .ready(ready2), .frame_start, .llr_in, .dec_valid(dec_valid2), .dec_u(dec_u2),
    .dec_crc_ok(dec_crc_ok2), .dec_pfg(dec_pfg2), .pfg_done(pfg_done2),
    .pfg_early(pfg_early2), .pfg_iters(pfg_iters2), .stall_pgu(stall_pgu2),
    .stall_rec(stall_rec2), .list_change(list_change2)
  );

  initial begin clk = 0; forever #5 clk = ~clk; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #500ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event monitor
  always @(posedge clk) if (rst_n) begin
    if (pfg_done) begin
      iters_q.push_back(int'(pfg_iters));
      if (pfg_early) n_early++; else n_imax++;
      if (!pfg_early) chk(int'(pfg_iters) == IMAX, "non-early stop must be at I_max");
      if (pfg_early) chk(int'(pfg_iters) >= 3 && int'(pfg_iters) <= IMAX, "SA stop needs 3 iterations");
    end
    if (list_change) n_change++;
    if (stall_pgu) n_stall_pgu++;
    if (stall_rec) n_stall_rec++;
    if (pfg_done2) iters2_q.push_back(int'(pfg_iters2));
    if (stall_rec2) n_stall_rec2++;
  end

  // expected frame latency of the slot schedule
  function automatic int exp_latency(int_q iq, int k, int ls);
    int lat;
    lat = 0;
    for (int l = 0; l <= k && l < iq.size(); l++) begin
      int s;
      s = (NS - 1) * iq[l] + 1;
      if (l + 1 < ls) s = imax2(s, NS + 2 * tsteps[l+1].size());
      if (l > 0) s = imax2(s, tsteps[l-1].size());
      lat += 1 + s;
    end
    return lat + tsteps[k].size();
  endfunction

  function automatic int imax2(int a, int b);
    return (a > b) ? a : b;
  endfunction

  // CRC-11 over the information positions of a natural-order u (frozen
  // positions must be 0)
  function automatic bit crc_holds(input logic [N-1:0] w);
    int_q bits;
    bit fz_ok;
    bits = {}; fz_ok = 1;
    for (int i = 0; i < N; i++)
      if (fz[i] != 0) begin if (w[i]) fz_ok = 0; end
      else bits.push_back(int'(w[i]));
    return fz_ok && (crc11(bits) == 0);
  endfunction

  task automatic check_second(input int_q u, input int ls);
    if (dec_crc_ok2) begin
      bit same;
      same = 1;
      for (int i = 0; i < N; i++) if (dec_u2[i] != u[i][0]) same = 0;
      chk(crc_holds(dec_u2), "I_max=3 decoder: word marked CRC-correct does not satisfy the CRC");
      if (!same) n_undetected++;
      n_crc_words++;
    end else chk(int'(dec_pfg2) == ls - 1, "I_max=3 decoder: failure before the end of the list");
  endtask

  task automatic decode_frame(input real ebn0, input int ls, input bit noiseless);
    int_q msg, u, x;
    int c, cyc, cyc2, k, exp_lat, pos, t;
    bit ok;
    logic [N-1:0] ud;
    real sigma;
    msg = {};
    for (int j = 0; j < KINFO; j++) msg.push_back($urandom_range(1));
    c = crc11(msg);
    for (int j = CRC_W - 1; j >= 0; j--) msg.push_back((c >> j) & 1);
    u = {}; pos = 0;
    for (int i = 0; i < N; i++)
      if (fz[i] != 0) u.push_back(0);
      else begin u.push_back(msg[pos]); pos++; end
    x = encode(u);
    sigma = $sqrt(1.0 / (2.0 * (real'(KINFO) / real'(N)) * (10.0 ** (ebn0 / 10.0))));
    for (int i = 0; i < N; i++) begin
      real y;
      y = (x[i] != 0) ? -1.0 : 1.0;
      if (!noiseless) y = y + sigma * gauss();
      llr_in[i] = llr_t'(quant(2.0 * y / (sigma * sigma)));
    end
    list_size = LSW'(ls);
    while (!(ready && ready2)) @(negedge clk);
    iters_q = {}; iters2_q = {};
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    for (int i = 0; i < N; i++) llr_in[i] = '0;   // frame is buffered
    cyc = -1; cyc2 = -1; t = 0;
    while ((cyc < 0 || cyc2 < 0) && t < 100000) begin
      if (dec_valid2 && cyc2 < 0) begin cyc2 = t; check_second(u, ls); end
      if (dec_valid && cyc < 0) begin cyc = t; ok = dec_crc_ok; ud = dec_u; k = int'(dec_pfg); end
      @(negedge clk); t++;
    end
    chk(cyc2 == exp_latency(iters2_q, int'(dec_pfg2), ls),
        $sformatf("I_max=3 decoder: frame latency %0d, expected %0d", cyc2, exp_latency(iters2_q, int'(dec_pfg2), ls)));
    chk(iters_q.size() == k + 1, $sformatf("%0d PFGs decoded, output from PFG %0d", iters_q.size(), k));
    exp_lat = exp_latency(iters_q, k, ls);
    chk(cyc == exp_lat, $sformatf("frame latency %0d, expected %0d (PFG %0d)", cyc, exp_lat, k));
    if (ok) begin
      bit same;
      same = 1;
      for (int i = 0; i < N; i++) if (ud[i] != u[i][0]) same = 0;
      chk(crc_holds(ud), "word marked CRC-correct does not satisfy the CRC");
      if (!same) n_undetected++;
      n_crc_words++;
      if (!same) begin
        int nf, ni;
        nf = 0; ni = 0;
        for (int i = 0; i < N; i++) if (ud[i] != u[i][0]) begin if (fz[i] != 0) nf++; else ni++; end
        $display("  differing bits: %0d frozen, %0d information", nf, ni);
      end
      if (k == 0) n_ok0++; else n_ok_later++;
      if (k < ls - 1) n_early_exit++;
    end else begin
      chk(k == ls - 1, "failure reported before the end of the list");
      n_allfail++;
    end
    if (noiseless) chk(ok && k == 0, "noiseless frame decoded on PFG 0");
    @(negedge clk);
  endtask

  initial begin
    int_q pfgs [LMAX];
    rst_n = 0; cfg_build = 0; pfg_we = 0; pfg_waddr = '0; frame_start = 0;
    list_size = LSW'(1); frozen = '1;
    for (int i = 0; i < N; i++) llr_in[i] = '0;
    for (int s = 0; s < NS; s++) pfg_wdata[s] = '0;
    // code construction and PFG list
    fz = pw_frozen(N, KINFO + CRC_W);
    for (int i = 0; i < N; i++) frozen[i] = fz[i][0];
    for (int e = 0; e < LMAX; e++) begin
      pfgs[e] = {};
      for (int s = 0; s < NS; s++) pfgs[e].push_back(s);
      if (e == 1)
        for (int s = 0; s < NS; s++) pfgs[e][s] = NS - 1 - s;
      else if (e > 1)
        for (int s = NS - 1; s > 0; s--) begin
          int r, t;
          r = $urandom_range(s);
          t = pfgs[e][s]; pfgs[e][s] = pfgs[e][r]; pfgs[e][r] = t;
        end
      tsteps[e] = decompose(pfgs[e]);   // empty for entry 0
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < LMAX; e++) begin
      pfg_we = 1; pfg_waddr = LW'(e);
      for (int s = 0; s < NS; s++) pfg_wdata[s] = stage_t'(pfgs[e][s]);
      @(negedge clk);
    end
    pfg_we = 0;
    cfg_build = 1;
    @(negedge clk);
    cfg_build = 0;

    for (int f = 0; f < 5; f++) decode_frame(0.0, 8, 1);
    for (int f = 0; f < 150; f++) begin
      int ls_sel;
      real snr;
      ls_sel = $urandom_range(3);
      snr = 1.0 + 0.5 * real'($urandom_range(6));
      decode_frame(snr, (ls_sel == 0) ? 1 : (ls_sel == 1) ? 4 : (ls_sel == 2) ? 8 : 16, 0);
    end

    $display("SA early stops %0d, I_max stops %0d, list changes %0d", n_early, n_imax, n_change);
    $display("PGU stall cycles %0d, recovery stall cycles %0d (I_max=3 decoder: %0d)", n_stall_pgu, n_stall_rec, n_stall_rec2);
    $display("CRC ok on PFG 0: %0d, on a later PFG: %0d, early exits %0d, all PFGs failed %0d",
             n_ok0, n_ok_later, n_early_exit, n_allfail);
    $display("CRC-correct words %0d, of which differ from the sent u (undetected errors) %0d",
             n_crc_words, n_undetected);
    chk(n_undetected * 50 <= n_crc_words + 100, "too many undetected errors for an 11-bit CRC");
    chk(n_early > 0, "SA early termination never happened");
    chk(n_imax > 0, "I_max termination never happened");
    chk(n_change > 0, "list change never happened");
    chk(n_stall_pgu > 0, "PGU stall never happened");
    chk(n_stall_rec + n_stall_rec2 > 0, "recovery stall never happened");
    chk(n_ok0 > 0, "CRC success on PFG 0 never happened");
    chk(n_ok_later > 0, "CRC success on a later PFG never happened");
    chk(n_early_exit > 0, "early exit from the list never happened");
    chk(n_allfail > 0, "frame with all PFGs failing never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
