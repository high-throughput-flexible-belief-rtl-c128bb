// tb_crc_detect: self-checking testbench of crc_detect at the default
// N = 1024 with the (1024, 512) code plus the 11-bit CRC (K' = 523).
// After building the signature table (busy must stay high for N cycles)
// it checks, on random messages carrying a CRC computed by a serial LFSR
// model, that the detector passes the correct word, fails a word with one
// or two information or CRC bits flipped, and ignores the frozen positions
// (a 1 written on a frozen position must not change the verdict). The
// frozen set is then changed and the table rebuilt.
module tb_crc_detect;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 1024;

  logic clk, rst_n, build, busy, pass;
  logic [N-1:0] frozen, u;
  int checks = 0, failures = 0;

  crc_detect #(.N(N)) dut (.*);

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

  task automatic run_set(input int kinfo);
    int_q fz, info_pos;
    int cyc;
    fz = pw_frozen(N, kinfo + CRC_W);
    info_pos = {};
    for (int i = 0; i < N; i++) begin
      frozen[i] = fz[i][0];
      if (fz[i] == 0) info_pos.push_back(i);
    end
    chk(info_pos.size() == kinfo + CRC_W, "frozen set size");
    @(negedge clk);
    build = 1;
    @(negedge clk);
    build = 0;
    cyc = 0;
    while (busy && cyc < 2 * N) begin @(negedge clk); cyc++; end
    chk(cyc == N, $sformatf("table build took %0d cycles", cyc));
    for (int rep = 0; rep < 100; rep++) begin
      int_q msg;
      int c, a, b;
      msg = {};
      for (int j = 0; j < kinfo; j++) msg.push_back($urandom_range(1));
      c = crc11(msg);
      for (int j = CRC_W - 1; j >= 0; j--) msg.push_back((c >> j) & 1);
      u = '0;
      foreach (info_pos[j]) u[info_pos[j]] = msg[j][0];
      #1 chk(pass, "correct word passes");
      a = info_pos[$urandom_range(info_pos.size() - 1)];
      u[a] = ~u[a];
      #1 chk(!pass, "one flipped bit fails");
      do b = info_pos[$urandom_range(info_pos.size() - 1)]; while (b == a);
      u[b] = ~u[b];
      #1 chk(!pass, "two flipped bits fail");
      u[a] = ~u[a]; u[b] = ~u[b];
      for (int t = 0; t < 5; t++) begin
        int f;
        do f = $urandom_range(N - 1); while (!frozen[f]);
        u[f] = 1'b1;
      end
      #1 chk(pass, "frozen positions ignored");
    end
  endtask

  initial begin
    rst_n = 0; build = 0; u = '0; frozen = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_set(512);
    run_set(256);
    run_set(768);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
