// bpl_decoder: serial belief-propagation list (BPL) decoder for polar codes.
//
// Top level. A received frame of N channel LLRs is decoded by one BP unit on
// a list of permuted factor graphs (PFGs), one after the other, until a
// decoded word passes the CRC-11 check. Instead of re-wiring the BP unit for
// each PFG, the input LLRs are shuffled: the permutation generation unit
// (PGU) builds the shuffle of each PFG on the fly out of n-1 fixed
// sub-routings, the BP unit always decodes on the original factor graph, and
// the recovery module undoes the shuffle on the decoded bits before the CRC.
// The BPU, PGU and recovery work on PFGs l, l+1 and l-1 concurrently.
//
// Blocks: llr_in_mem (Mem.R_0, Mem.L_n, frame buffer), bp_unit (BPU),
// sa_termination and crc_detect (the TDU), pgu (with the BSU and PFG
// memory), recovery and bpl_controller.
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//  * configuration: `frozen` (1 = frozen position, natural order) must be
//    stable; pulse `cfg_build` after changing it and wait for `ready`
//    (N cycles). PFG stage orders are written with pfg_we/pfg_waddr/
//    pfg_wdata (entry l = [pi^0 .. pi^{n-1}]); entry 0 is never read, PFG 0
//    being the original factor graph. `list_size` (1..LMAX) PFGs are tried.
//  * frame: when `ready`, pulse `frame_start` with `llr_in` valid (Q7.2,
//    positive = bit 0). `dec_valid` pulses when `dec_u` (natural-order u,
//    frozen positions included), `dec_crc_ok` and `dec_pfg` are valid.
//  * status pulses for monitoring: pfg_done / pfg_early / pfg_iters (a PFG
//    finished, by the SA rule, after that many iterations), stall_pgu,
//    stall_rec, list_change.
// The busy outputs of the PGU and recovery instances are left unread (the
// controller works from their done/valid outputs); lint reports them as
// unused signals.
// Defaults are the paper's: N = 1024, 7-bit LLRs, I_max = 50; LMAX = 128 is
// the largest list the paper evaluates.
module bpl_decoder
  import bpl_pkg::*;
#(
  parameter int N    = 1024,
  parameter int NS   = 10,
  parameter int LMAX = 128,
  parameter int IMAX = 50,
  parameter int LW   = $clog2(LMAX),
  parameter int LSW  = $clog2(LMAX+1),
  parameter int IW   = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  // configuration
  input  logic [N-1:0]   frozen,
  input  logic           cfg_build,
  input  logic           pfg_we,
  input  logic [LW-1:0]  pfg_waddr,
  input  stage_t         pfg_wdata [NS],
  input  logic [LSW-1:0] list_size,
  // frame
  output logic           ready,
  input  logic           frame_start,
  input  llr_t           llr_in [N],
  output logic           dec_valid,
  output logic [N-1:0]   dec_u,
  output logic           dec_crc_ok,
  output logic [LW-1:0]  dec_pfg,
  // status
  output logic           pfg_done,
  output logic           pfg_early,
  output logic [IW-1:0]  pfg_iters,
  output logic           stall_pgu,
  output logic           stall_rec,
  output logic           list_change
);
  localparam int MAXS = NS*(NS-1)/2;
  localparam int CW   = $clog2(MAXS+1);

  llr_t          r0_nat [N], ln_nat [N], mem_r0 [N], mem_ln [N], pgu_r0 [N], pgu_ln [N];
  llr_t          l1 [N];
  logic          mem_load_nat, mem_load_pgu;
  logic          bpu_start, bpu_run, bpu_iter_end;
  logic [IW-1:0] bpu_iters;
  logic          tdu_clear, tdu_sample, sa_term;
  logic [N-1:0]  u_hat, rec_u;
  logic          pgu_start, pgu_abort, pgu_busy, pgu_done;
  logic [LW-1:0] pgu_l;
  stage_t        pgu_steps [MAXS], rec_steps [MAXS];
  logic [CW-1:0] pgu_nsteps, rec_nsteps;
  logic          rec_start, rec_valid, rec_busy;
  logic          crc_busy, crc_pass;
  llr_t          pgu_ln_src [N];

  // The PGU captures L_n on the frame-start edge, when the frame buffer is
  // being written in the same edge, so it takes the channel LLRs directly
  // then; later PGU starts read the buffered copy.
  always_comb
    for (int i = 0; i < N; i++) pgu_ln_src[i] = mem_load_nat ? llr_in[i] : ln_nat[i];

  llr_in_mem #(.N(N)) u_mem (
    .clk, .rst_n, .frozen, .load_nat(mem_load_nat), .llr_in,
    .load_pgu(mem_load_pgu), .pgu_r0, .pgu_ln, .r0_nat, .ln_nat, .mem_r0, .mem_ln
  );

  bp_unit #(.N(N), .NS(NS), .IW(IW)) u_bpu (
    .clk, .rst_n, .start(bpu_start), .run(bpu_run), .r0(mem_r0), .ln(mem_ln),
    .iter_end(bpu_iter_end), .iters(bpu_iters), .l1
  );

  sa_termination #(.N(N)) u_term (
    .clk, .rst_n, .clear(tdu_clear), .sample(tdu_sample), .l1, .r0(mem_r0),
    .term(sa_term), .u_hat
  );

  pgu #(.N(N), .NS(NS), .LMAX(LMAX)) u_pgu (
    .clk, .rst_n, .pfg_we, .pfg_waddr, .pfg_wdata, .start(pgu_start), .l(pgu_l),
    .abort(pgu_abort), .r0_nat, .ln_nat(pgu_ln_src), .reg_r0(pgu_r0), .reg_ln(pgu_ln),
    .busy(pgu_busy), .done(pgu_done), .steps(pgu_steps), .nsteps(pgu_nsteps)
  );

  recovery #(.N(N), .NS(NS)) u_rec (
    .clk, .rst_n, .start(rec_start), .u_in(u_hat), .steps(rec_steps), .nsteps(rec_nsteps),
    .u_out(rec_u), .valid(rec_valid), .busy(rec_busy)
  );

  crc_detect #(.N(N)) u_crc (
    .clk, .rst_n, .frozen, .build(cfg_build), .busy(crc_busy), .u(rec_u), .pass(crc_pass)
  );

  bpl_controller #(.NS(NS), .LMAX(LMAX), .IMAX(IMAX), .IW(IW)) u_ctrl (
    .clk, .rst_n, .frame_start, .list_size, .ready, .crc_busy,
    .bpu_start, .bpu_run, .bpu_iter_end, .bpu_iters, .tdu_clear, .tdu_sample, .sa_term,
    .mem_load_nat, .mem_load_pgu,
    .pgu_start, .pgu_l, .pgu_abort, .pgu_done, .pgu_steps, .pgu_nsteps,
    .rec_start, .rec_steps, .rec_nsteps, .rec_valid, .crc_pass,
    .out_valid(dec_valid), .out_crc_ok(dec_crc_ok), .out_pfg(dec_pfg),
    .pfg_done, .pfg_early, .stall_pgu, .stall_rec
  );

  assign dec_u       = rec_u;
  assign pfg_iters   = bpu_iters;
  assign list_change = mem_load_pgu;
endmodule
