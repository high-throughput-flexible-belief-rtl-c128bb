// sa_termination: sign-assisted (SA) early termination and hard decision.
//
// At the end of every BP iteration (`sample`), the left-most L column that
// the BPU computes, L_1, is combined with the a-priori R_0 through a row of
// N/2 stage-0 pe_l elements to give L_0, and the decisions
// u'_i = HD(R_{0,i} + L_{0,i}) are registered into `u_hat`. `term` is high in
// the sample cycle when these decisions equal those of the two previous
// iterations, i.e. identical in three consecutive iterations, the paper's SA
// rule. `clear` forgets the history when a new PFG starts. The paper says
// only that the hard decisions in the BPU are compared; deriving them from L_1
// and R_0 with an extra stage-0 row (the BPU itself skips L_0) is this
// design's choice.
module sa_termination
  import bpl_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         sample,
  input  llr_t         l1 [N],
  input  llr_t         r0 [N],
  output logic         term,
  output logic [N-1:0] u_hat
);
  llr_t         l0 [N];
  logic [N-1:0] hd_now, hd_prev2;
  logic [1:0]   hist;    // number of stored previous decisions (saturates at 2)

  for (genvar p = 0; p < N/2; p++) begin : g_pe0
    pe_l u_pe (.l_up(l1[2*p]), .l_dn(l1[2*p+1]), .r_up(r0[2*p]), .r_dn(r0[2*p+1]),
               .o_up(l0[2*p]), .o_dn(l0[2*p+1]));
  end

  always_comb
    for (int i = 0; i < N; i++) hd_now[i] = hd(add_sat(r0[i], l0[i]));

  assign term = sample && (hist == 2'd2) && (hd_now == u_hat) && (u_hat == hd_prev2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_hat <= '0; hd_prev2 <= '0; hist <= '0;
    end else if (clear) begin
      hist <= '0;
    end else if (sample) begin
      hd_prev2 <= u_hat;
      u_hat    <= hd_now;
      if (hist != 2'd2) hist <= hist + 1'b1;
    end
  end
endmodule
