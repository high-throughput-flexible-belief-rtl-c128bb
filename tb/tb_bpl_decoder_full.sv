// tb_bpl_decoder_full: full-size self-checking testbench of the BPL decoder
// with its default parameters (N = 1024, n = 10, LMAX = 128, I_max = 50).
// A (1024, 512) polar code with CRC-11 (K' = 523 non-frozen positions,
// polarization-weight construction) is decoded with list size 32 on random
// PFGs whose left four stages are fixed (the paper's p = 4 setting).
// Checks: a noiseless frame is decoded on PFG 0 after the minimum of three
// iterations and in (n-1)*3 + 2 cycles; noisy frames at 2.0-3.0 dB give
// CRC-correct words equal to the sent u, with the frame latency equal to the
// slot schedule (see tb_bpl_decoder) computed from the reported iteration
// counts and the testbench's own decomposition of each PFG.
module tb_bpl_decoder_full;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 1024, NS = 10, LMAX = 128, IMAX = 50;
  localparam int LW = $clog2(LMAX), LSW = $clog2(LMAX+1), IW = 8;
  localparam int KINFO = 512;

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
  int_q iters_q;
  int_q tsteps [LMAX];
  int_q fz;

  bpl_decoder dut (.*);

  initial begin clk = 0; forever #5 clk = ~clk; end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100ms;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && pfg_done) iters_q.push_back(int'(pfg_iters));

  function automatic int imax2(int a, int b);
    return (a > b) ? a : b;
  endfunction

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

  task automatic decode_frame(input real ebn0, input int ls, input bit noiseless);
    int_q msg, u, x;
    int c, cyc, k, pos;
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
    while (!ready) @(negedge clk);
    iters_q = {};
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    cyc = 0;
    while (!dec_valid && cyc < 200000) begin @(negedge clk); cyc++; end
    k = int'(dec_pfg);
    chk(dec_valid, "frame decoded");
    chk(cyc == exp_latency(iters_q, k, ls),
        $sformatf("frame latency %0d, expected %0d", cyc, exp_latency(iters_q, k, ls)));
    if (dec_crc_ok) begin
      bit same;
      same = 1;
      for (int i = 0; i < N; i++) if (dec_u[i] != u[i][0]) same = 0;
      chk(same, "CRC-correct word equals the sent u");
    end
    if (noiseless) begin
      chk(dec_crc_ok && k == 0, "noiseless frame decoded on PFG 0");
      chk(iters_q.size() == 1 && iters_q[0] == 3, "noiseless frame stops after 3 iterations");
      chk(cyc == (NS - 1) * 3 + 2, $sformatf("noiseless frame latency %0d", cyc));
    end
    $display("frame at %0.1f dB: PFG %0d, CRC %0d, latency %0d cycles, PFGs tried %0d",
             ebn0, k, dec_crc_ok, cyc, iters_q.size());
    @(negedge clk);
  endtask

  initial begin
    int_q pfgs [LMAX];
    rst_n = 0; cfg_build = 0; pfg_we = 0; pfg_waddr = '0; frame_start = 0;
    list_size = LSW'(1); frozen = '1;
    for (int i = 0; i < N; i++) llr_in[i] = '0;
    for (int s = 0; s < NS; s++) pfg_wdata[s] = '0;
    fz = pw_frozen(N, KINFO + CRC_W);
    for (int i = 0; i < N; i++) frozen[i] = fz[i][0];
    for (int e = 0; e < LMAX; e++) begin
      pfgs[e] = {};
      for (int s = 0; s < NS; s++) pfgs[e].push_back(s);
      if (e > 0)
        for (int s = NS - 1; s > 4; s--) begin
          int r, t;
          r = 4 + $urandom_range(s - 4);
          t = pfgs[e][s]; pfgs[e][s] = pfgs[e][r]; pfgs[e][r] = t;
        end
      tsteps[e] = decompose(pfgs[e]);
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
    decode_frame(0.0, 32, 1);
    decode_frame(3.0, 32, 0);
    decode_frame(2.5, 32, 0);
    decode_frame(2.0, 32, 0);
    decode_frame(1.5, 32, 0);
    decode_frame(1.0, 32, 0);
    decode_frame(1.0, 8, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
