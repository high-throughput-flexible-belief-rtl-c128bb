// llr_in_mem: the memories Mem.R_0 and Mem.L_n that feed the BPU, plus the
// frame buffer of the received LLRs.
//
// `load_nat` (frame start) stores the channel LLRs L_n in the frame buffer
// and in Mem.L_n, and writes Mem.R_0 with the a-priori LLRs of the original
// factor graph: +LLR_MAX (standing for +infinity) at frozen positions, 0
// elsewhere. `load_pgu` copies the PGU's registers (the shuffled LLRs of the
// next PFG) into the two memories when the BPU moves to that PFG. The
// natural-order R_0 and the frame buffer are handed to the PGU, which always
// starts from them. Registers stand in for the memories; the frame buffer is
// this design's way of keeping the received LLRs for the whole list.
module llr_in_mem
  import bpl_pkg::*;
#(
  parameter int N = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] frozen,
  input  logic         load_nat,
  input  llr_t         llr_in [N],
  input  logic         load_pgu,
  input  llr_t         pgu_r0 [N],
  input  llr_t         pgu_ln [N],
  output llr_t         r0_nat [N],
  output llr_t         ln_nat [N],
  output llr_t         mem_r0 [N],
  output llr_t         mem_ln [N]
);
  always_comb
    for (int i = 0; i < N; i++) r0_nat[i] = frozen[i] ? LLR_MAX : llr_t'(0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        ln_nat[i] <= '0; mem_r0[i] <= '0; mem_ln[i] <= '0;
      end
    end else if (load_nat) begin
      ln_nat <= llr_in;
      mem_ln <= llr_in;
      mem_r0 <= r0_nat;
    end else if (load_pgu) begin
      mem_ln <= pgu_ln;
      mem_r0 <= pgu_r0;
    end
  end
endmodule
