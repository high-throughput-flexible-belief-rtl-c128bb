// tb_sa_termination: self-checking testbench of the same-answer early
// termination detector at N = 64.
// The testbench drives L_1 and R_0 vectors, models the final stage-0
// computation (L_0 from L_1 and R_0 with the L-side PE, beta = 0) and the hard
// decision u_i = HD(R_0 + L_0), and checks u_hat after every sample and that
// term is raised exactly on the third consecutive sample with identical
// hard decisions since the last clear, never earlier.
module tb_sa_termination;
  import bpl_pkg::*;
  import tb_util_pkg::*;
  localparam int N = 64;

  logic clk, rst_n, clear, sample, term;
  llr_t l1 [N], r0 [N];
  logic [N-1:0] u_hat;
  int checks = 0, failures = 0;
  int n_term = 0;

  sa_termination #(.N(N)) dut (.*);

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

  function automatic logic [N-1:0] model_hd();
    logic [N-1:0] h;
    for (int p = 0; p < N/2; p++) begin
      int a0, a1;
      a0 = gref(int'(l1[2*p]), satq(int'(l1[2*p+1]) + int'(r0[2*p+1])), 0);
      a1 = satq(gref(int'(l1[2*p]), int'(r0[2*p]), 0) + int'(l1[2*p+1]));
      h[2*p]   = (satq(int'(r0[2*p]) + a0) < 0);
      h[2*p+1] = (satq(int'(r0[2*p+1]) + a1) < 0);
    end
    return h;
  endfunction

  // random vectors; keep_hd = 1 keeps the previous hard decisions by
  // rescaling magnitudes only when the model agrees, otherwise any vector
  task automatic new_vectors();
    for (int i = 0; i < N; i++) begin
      l1[i] = llr_t'($urandom_range(126) - 63);
      r0[i] = ($urandom_range(3) == 0) ? llr_t'(63) : llr_t'(0);
    end
  endtask

  // one sample; expect_term given by the model history
  logic [N-1:0] h1, h2;
  int hist;
  task automatic do_sample();
    logic [N-1:0] h;
    bit exp_term;
    h = model_hd();
    exp_term = (hist >= 2) && (h == h1) && (h1 == h2);
    sample = 1;
    #1;
    chk(term == exp_term, $sformatf("term %0d expected %0d (hist %0d)", term, exp_term, hist));
    if (term) n_term++;
    @(negedge clk);
    sample = 0;
    chk(u_hat == h, "hard decisions");
    h2 = h1; h1 = h;
    if (hist < 2) hist++;
  endtask

  task automatic do_clear();
    clear = 1;
    @(negedge clk);
    clear = 0;
    hist = 0;
  endtask

  initial begin
    rst_n = 0; clear = 0; sample = 0; hist = 0; h1 = '0; h2 = '0;
    new_vectors();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 200; rep++) begin
      int mode;
      mode = $urandom_range(3);
      if (mode == 0) do_clear();
      else if (mode == 1) new_vectors();
      else if (mode == 2) begin
        // small change that usually keeps the decisions
        int i;
        i = $urandom_range(N - 1);
        l1[i] = llr_t'(int'(l1[i]) / 2);
      end
      do_sample();
      // idle cycles without sample keep the history
      if ($urandom_range(1) == 1) @(negedge clk);
    end
    chk(n_term > 10, $sformatf("term seen %0d times", n_term));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
