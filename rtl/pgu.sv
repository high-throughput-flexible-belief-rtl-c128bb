// pgu: permutation generation unit.
//
// Produces the shuffled input LLRs R_{0,pi} and L_{n,pi} of one permuted
// factor graph (PFG) from the frame's natural-order R_0 and L_n. It wraps the
// basic shuffling unit (bsu) with the two "for next PFG" registers Reg L_n and
// Reg R_0 and their input multiplexers: on `start` both registers load the
// natural-order LLRs; the BSU then spends n cycles decomposing the PFG, T
// cycles re-writing Reg L_n with one sub-routing per cycle and T cycles doing
// the same to Reg R_0 (L_n first, as in the paper's timing diagram). `done`
// stays high, and the registers hold the result, until the next start. The
// registers double as the BSU's pipe register, a choice of this design.
module pgu
  import bpl_pkg::*;
#(
  parameter int N    = 1024,
  parameter int NS   = 10,
  parameter int LMAX = 128,
  parameter int MAXS = NS*(NS-1)/2,
  parameter int LW   = $clog2(LMAX),
  parameter int CW   = $clog2(MAXS+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pfg_we,
  input  logic [LW-1:0] pfg_waddr,
  input  stage_t        pfg_wdata [NS],
  input  logic          start,
  input  logic [LW-1:0] l,
  input  logic          abort,
  input  llr_t          r0_nat [N],
  input  llr_t          ln_nat [N],
  output llr_t          reg_r0 [N],
  output llr_t          reg_ln [N],
  output logic          busy,
  output logic          done,
  output stage_t        steps [MAXS],
  output logic [CW-1:0] nsteps
);
  logic         wr_a, wr_b;
  logic [Q-1:0] din  [N];
  logic [Q-1:0] dout [N];

  always_comb
    for (int i = 0; i < N; i++) din[i] = wr_b ? reg_r0[i] : reg_ln[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin reg_r0[i] <= '0; reg_ln[i] <= '0; end
    end else if (start) begin
      reg_r0 <= r0_nat;
      reg_ln <= ln_nat;
    end else begin
      if (wr_a) for (int i = 0; i < N; i++) reg_ln[i] <= llr_t'(dout[i]);
      if (wr_b) for (int i = 0; i < N; i++) reg_r0[i] <= llr_t'(dout[i]);
    end
  end

  bsu #(.N(N), .NS(NS), .LMAX(LMAX), .MAXS(MAXS)) u_bsu (
    .clk, .rst_n, .pfg_we, .pfg_waddr, .pfg_wdata, .start, .l, .abort,
    .busy, .done, .wr_a, .wr_b, .din, .dout, .steps, .nsteps
  );
endmodule
