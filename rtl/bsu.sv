// bsu: basic shuffling unit of the permutation generation unit.
//
// Holds the PFG memory (stage orders of up to LMAX permuted factor graphs,
// written offline through a write port), a controller and the shuffle
// network of n-1 fixed sub-routings. A `start` with PFG index `l` reads the
// stage order pi = [pi^0 .. pi^{n-1}] and then:
//   1. DECOMP, n cycles: cycle i runs one pass of the decomposition
//      (s = PFG[i], e = i; PFG[j] = updateStage(PFG[j], s, e) for j >= i) and
//      appends the |s-e| sub-routing indices of V_{s,e} to a step list
//      (descending s-1..e when s > e, ascending s..e-1 when s < e);
//   2. ROUTE_A, T cycles: one sub-routing per cycle on operand A (L_n);
//   3. ROUTE_B, T cycles: the same T sub-routings on operand B (R_0).
// T = sum_i |s_i - i|, so `done` rises n + 2T cycles after the start edge,
// which is the PGU latency L'_pi = 2 L_pi - n of the paper. The operand
// register itself (the pipe register of the paper's figure) lives in the PGU:
// the BSU takes din, returns dout = V_{k,k+1}(din) and says which register to
// write. The step list is also exported so that the recovery module can undo
// the permutation. Storing the step list instead of the s vector, and the
// explicit DONE state, are choices of this design; the algorithm, the one
// sub-routing per cycle and the latency follow the paper.
module bsu
  import bpl_pkg::*;
#(
  parameter int N    = 1024,
  parameter int NS   = 10,
  parameter int LMAX = 128,                   // PFG memory depth
  parameter int MAXS = NS*(NS-1)/2,           // longest step list
  parameter int LW   = $clog2(LMAX),
  parameter int CW   = $clog2(MAXS+1)
) (
  input  logic         clk,
  input  logic         rst_n,
  // PFG memory write port
  input  logic         pfg_we,
  input  logic [LW-1:0] pfg_waddr,
  input  stage_t       pfg_wdata [NS],
  // control
  input  logic         start,
  input  logic [LW-1:0] l,
  input  logic         abort,
  output logic         busy,
  output logic         done,
  output logic         wr_a,     // write dout into operand register A (L_n)
  output logic         wr_b,     // write dout into operand register B (R_0)
  // data path
  input  logic [Q-1:0] din  [N],
  output logic [Q-1:0] dout [N],
  // resulting sub-routing program
  output stage_t       steps [MAXS],
  output logic [CW-1:0] nsteps
);
  typedef enum logic [2:0] {S_IDLE, S_DECOMP, S_RA, S_RB, S_DONE} state_e;
  state_e state;

  stage_t pfg_mem [LMAX][NS];
  stage_t work    [NS];
  stage_t work_n  [NS];
  stage_t list_n  [MAXS];
  logic [CW-1:0] cnt_n;
  logic [SW-1:0] i_cnt;
  logic [CW-1:0] ptr;
  stage_t k_sel;

  // One decomposition pass (combinational next state).
  always_comb begin
    stage_t s, e;
    int t;
    work_n = work;
    list_n = steps;
    cnt_n  = nsteps;
    s = work[0];
    for (int j = 0; j < NS; j++) if (j == int'(i_cnt)) s = work[j];
    e = stage_t'(i_cnt);
    for (int j = 0; j < NS; j++)
      if (j >= int'(i_cnt)) work_n[j] = update_stage(work[j], s, e);
    t = int'(nsteps);
    for (int m = 0; m < NS-1; m++) begin
      if (s > e && m < int'(s) - int'(e) && t + m < MAXS)
        list_n[t+m] = stage_t'(int'(s) - 1 - m);
      else if (s < e && m < int'(e) - int'(s) && t + m < MAXS)
        list_n[t+m] = stage_t'(int'(s) + m);
    end
    cnt_n = (s > e) ? CW'(t + int'(s) - int'(e)) : CW'(t + int'(e) - int'(s));
  end

  always_ff @(posedge clk) begin
    if (pfg_we) pfg_mem[pfg_waddr] <= pfg_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      i_cnt  <= '0;
      ptr    <= '0;
      nsteps <= '0;
      for (int m = 0; m < MAXS; m++) steps[m] <= '0;
      for (int j = 0; j < NS; j++) work[j] <= '0;
    end else if (abort) begin
      state <= S_IDLE;
    end else if (start) begin
      state  <= S_DECOMP;
      i_cnt  <= '0;
      ptr    <= '0;
      nsteps <= '0;
      work   <= pfg_mem[l];
    end else begin
      unique case (state)
        S_DECOMP: begin
          work   <= work_n;
          steps  <= list_n;
          nsteps <= cnt_n;
          i_cnt  <= i_cnt + 1'b1;
          if (int'(i_cnt) == NS-1) state <= (cnt_n == '0) ? S_DONE : S_RA;
        end
        S_RA: begin
          ptr <= ptr + 1'b1;
          if (ptr == nsteps - 1'b1) begin ptr <= '0; state <= S_RB; end
        end
        S_RB: begin
          ptr <= ptr + 1'b1;
          if (ptr == nsteps - 1'b1) begin ptr <= '0; state <= S_DONE; end
        end
        default: ;
      endcase
    end
  end

  assign busy  = (state == S_DECOMP) || (state == S_RA) || (state == S_RB);
  assign done  = (state == S_DONE);
  assign wr_a  = (state == S_RA);
  assign wr_b  = (state == S_RB);
  assign k_sel = (state == S_RA || state == S_RB) ? steps[ptr] : stage_t'(NS-1);

  shuffle_net #(.N(N), .NS(NS), .W(Q)) u_net (.din(din), .k(k_sel), .dout(dout));
endmodule
