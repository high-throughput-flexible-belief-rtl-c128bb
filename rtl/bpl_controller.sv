// bpl_controller: the decoupled list schedule of the serial BPL decoder.
//
// A frame is decoded on up to `list_size` permuted factor graphs (PFGs),
// PFG 0 being the original factor graph. The decoder works in slots: in slot
// l the BPU decodes PFG l, the PGU prepares the shuffled LLRs of PFG l+1 and
// the recovery module re-orders (then the CRC checks) the decisions of PFG
// l-1, all at the same time.
//  * The BPU of a slot stops at the end of an iteration when the SA rule
//    fires or after IMAX iterations; the decisions u' are registered then.
//  * A slot ends when the BPU has stopped, the PGU is done (if there is a next
//    PFG) and the recovery of PFG l-1 has failed its CRC. Waiting for the PGU
//    is a "PGU stall", waiting for the recovery a "recovery stall".
//  * At a slot change ("list change") the PGU registers are copied into
//    Mem.R_0/Mem.L_n, the BPU restarts, the PGU starts on PFG l+2, and the
//    recovery starts on u' of PFG l with PFG l's sub-routing program.
//  * As soon as a recovered word passes the CRC it is output (`out_valid`,
//    `out_crc_ok` = 1), and the BPU and PGU work on later PFGs is dropped.
//  * If the last PFG also fails, its recovered word is output with
//    `out_crc_ok` = 0.
// Resulting frame latency in cycles, frame start edge to out_valid, for a
// frame that ends after PFG k (T_l = sub-routings of PFG l, I_l = iterations):
//   sum_{l=0..k} (1 + max((n-1) I_l + 1, n + 2 T_{l+1}, T_{l-1})) + T_k
// with the PGU term absent for the last PFG and the recovery term absent in
// slot 0. The paper's schedule and latency formula are followed; the +1 per
// slot (the slot change) and the all-fail output are this design's choices.
module bpl_controller
  import bpl_pkg::*;
#(
  parameter int NS   = 10,
  parameter int LMAX = 128,
  parameter int IMAX = 50,
  parameter int MAXS = NS*(NS-1)/2,
  parameter int LW   = $clog2(LMAX),
  parameter int LSW  = $clog2(LMAX+1),
  parameter int CW   = $clog2(MAXS+1),
  parameter int IW   = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           frame_start,
  input  logic [LSW-1:0] list_size,
  output logic           ready,
  input  logic           crc_busy,
  // BPU / TDU
  output logic           bpu_start,
  output logic           bpu_run,
  input  logic           bpu_iter_end,
  input  logic [IW-1:0]  bpu_iters,
  output logic           tdu_clear,
  output logic           tdu_sample,
  input  logic           sa_term,
  // input memories
  output logic           mem_load_nat,
  output logic           mem_load_pgu,
  // PGU
  output logic           pgu_start,
  output logic [LW-1:0]  pgu_l,
  output logic           pgu_abort,
  input  logic           pgu_done,
  input  stage_t         pgu_steps [MAXS],
  input  logic [CW-1:0]  pgu_nsteps,
  // recovery + detection
  output logic           rec_start,
  output stage_t         rec_steps [MAXS],
  output logic [CW-1:0]  rec_nsteps,
  input  logic           rec_valid,
  input  logic           crc_pass,
  // results and status
  output logic           out_valid,
  output logic           out_crc_ok,
  output logic [LW-1:0]  out_pfg,       // PFG whose word is output
  output logic           pfg_done,      // BPU finished a PFG this cycle
  output logic           pfg_early,     // ... because of the SA rule
  output logic           stall_pgu,
  output logic           stall_rec
);
  typedef enum logic [0:0] {C_IDLE, C_RUN} state_e;
  state_e state;

  logic          bpu_active, bpu_fin, rec_active, last_done;
  logic [LSW-1:0] bpu_l;
  logic [LW-1:0]  rec_l;
  logic          has_next, has_next2, rec_ok, rec_fail, slot_end, bpu_stop;

  assign ready      = (state == C_IDLE) && !crc_busy;
  assign has_next   = (LSW'(bpu_l) + 1'b1) < list_size;
  assign has_next2  = (LSW'(bpu_l) + LSW'(2)) < list_size;
  assign rec_ok     = rec_active && rec_valid && crc_pass;
  assign rec_fail   = rec_active && rec_valid && !crc_pass;
  assign bpu_run    = (state == C_RUN) && bpu_active;
  assign tdu_sample = bpu_run && bpu_iter_end;
  assign bpu_stop   = tdu_sample && (sa_term || (bpu_iters >= IW'(IMAX)));
  assign slot_end   = (state == C_RUN) && bpu_fin && !last_done && !rec_ok &&
                      (!has_next || pgu_done) && (!rec_active || rec_fail);
  assign stall_pgu  = (state == C_RUN) && bpu_fin && !last_done && has_next && !pgu_done;
  assign stall_rec  = (state == C_RUN) && bpu_fin && !last_done && rec_active && !rec_valid;
  assign pfg_done   = bpu_stop;
  assign pfg_early  = bpu_stop && sa_term;
  assign out_pfg    = rec_l;

  // Start pulses, decided combinationally and registered by the blocks.
  always_comb begin
    mem_load_nat = 1'b0; mem_load_pgu = 1'b0;
    bpu_start = 1'b0; tdu_clear = 1'b0; pgu_start = 1'b0; pgu_l = '0;
    rec_start = 1'b0; pgu_abort = 1'b0;
    out_valid = 1'b0; out_crc_ok = 1'b0;
    if (state == C_IDLE) begin
      if (frame_start && !crc_busy) begin
        mem_load_nat = 1'b1; bpu_start = 1'b1; tdu_clear = 1'b1;
        if (list_size > LSW'(1)) begin pgu_start = 1'b1; pgu_l = LW'(1); end
      end
    end else begin
      if (rec_ok) begin
        out_valid = 1'b1; out_crc_ok = 1'b1; pgu_abort = 1'b1;
      end else if (rec_fail && last_done) begin
        out_valid = 1'b1; out_crc_ok = 1'b0; pgu_abort = 1'b1;
      end else if (slot_end) begin
        rec_start = 1'b1;
        if (has_next) begin
          mem_load_pgu = 1'b1; bpu_start = 1'b1; tdu_clear = 1'b1;
          if (has_next2) begin pgu_start = 1'b1; pgu_l = LW'(bpu_l + LSW'(2)); end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; bpu_active <= 1'b0; bpu_fin <= 1'b0; rec_active <= 1'b0;
      last_done <= 1'b0; bpu_l <= '0; rec_l <= '0;
      rec_nsteps <= '0;
      for (int m = 0; m < MAXS; m++) rec_steps[m] <= '0;
    end else begin
      if (state == C_IDLE) begin
        if (frame_start && !crc_busy) begin
          state <= C_RUN; bpu_active <= 1'b1; bpu_fin <= 1'b0; rec_active <= 1'b0;
          last_done <= 1'b0; bpu_l <= '0;
          rec_nsteps <= '0;                       // PFG 0 is the original graph
        end
      end else begin
        if (bpu_stop) begin bpu_active <= 1'b0; bpu_fin <= 1'b1; end
        if (out_valid) begin
          state <= C_IDLE; bpu_active <= 1'b0; rec_active <= 1'b0;
        end else if (rec_fail) begin
          rec_active <= 1'b0;
        end
        if (slot_end) begin
          rec_active <= 1'b1;
          rec_l      <= LW'(bpu_l);
          if (has_next) begin
            bpu_l      <= bpu_l + 1'b1;
            bpu_active <= 1'b1;
            bpu_fin    <= 1'b0;
            rec_steps  <= pgu_steps;              // program of the PFG now in the BPU
            rec_nsteps <= pgu_nsteps;
          end else begin
            last_done  <= 1'b1;
          end
        end
      end
    end
  end
endmodule
