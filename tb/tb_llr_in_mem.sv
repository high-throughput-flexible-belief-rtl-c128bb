// tb_llr_in_mem: self-checking testbench of the input LLR memories at N = 64.
// Checks that R_0 in natural order is +63 (saturated infinity) on frozen
// positions and 0 elsewhere, that load_nat stores the channel LLRs as L_n
// (natural copy and working copy) and R_0 into the working R_0 memory,
// that load_pgu replaces only the working copies with the permuted vectors,
// and that the memories hold their contents when neither load is active.
module tb_llr_in_mem;
  import bpl_pkg::*;
  localparam int N = 64;

  logic clk, rst_n, load_nat, load_pgu;
  logic [N-1:0] frozen;
  llr_t llr_in [N], pgu_r0 [N], pgu_ln [N];
  llr_t r0_nat [N], ln_nat [N], mem_r0 [N], mem_ln [N];
  int checks = 0, failures = 0;

  llr_in_mem #(.N(N)) dut (.*);

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
    llr_t ch [N], pr [N], pl [N];
    rst_n = 0; load_nat = 0; load_pgu = 0; frozen = '0;
    for (int i = 0; i < N; i++) begin llr_in[i] = '0; pgu_r0[i] = '0; pgu_ln[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 50; rep++) begin
      for (int i = 0; i < N; i++) begin
        frozen[i] = ($urandom_range(1) == 1);
        ch[i] = llr_t'($urandom_range(126) - 63);
        pr[i] = llr_t'($urandom_range(126) - 63);
        pl[i] = llr_t'($urandom_range(126) - 63);
      end
      #1;
      for (int i = 0; i < N; i++)
        chk(r0_nat[i] == (frozen[i] ? llr_t'(63) : llr_t'(0)), "natural R0");
      llr_in = ch; load_nat = 1;
      @(negedge clk);
      load_nat = 0;
      for (int i = 0; i < N; i++) llr_in[i] = '0;
      for (int i = 0; i < N; i++) begin
        chk(ln_nat[i] == ch[i] && mem_ln[i] == ch[i], "Ln after load_nat");
        chk(mem_r0[i] == (frozen[i] ? llr_t'(63) : llr_t'(0)), "R0 after load_nat");
      end
      repeat (2) @(negedge clk);
      for (int i = 0; i < N; i++) chk(mem_ln[i] == ch[i], "Ln held");
      pgu_r0 = pr; pgu_ln = pl; load_pgu = 1;
      @(negedge clk);
      load_pgu = 0;
      for (int i = 0; i < N; i++) begin pgu_r0[i] = '0; pgu_ln[i] = '0; end
      for (int i = 0; i < N; i++) begin
        chk(mem_r0[i] == pr[i] && mem_ln[i] == pl[i], "working copies after load_pgu");
        chk(ln_nat[i] == ch[i], "natural Ln kept");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
