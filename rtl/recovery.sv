// recovery: brings the decoded bits u' of a permuted factor graph back to
// natural order.
//
// Decoding on a PFG sees u shuffled by V_pi = V_{k1} V_{k2} ... V_{kT} (the
// step list produced by the BSU). Every sub-routing is its own inverse, so
// u = u' V_{kT} ... V_{k1}: the module applies the same N-bit sub-routings in
// reverse order, one per cycle, on an N-bit register. `start` loads u' and the
// step list; `valid` rises T cycles later (on the load edge itself when T = 0,
// e.g. for the original factor graph) and holds until the next start. The
// T-cycle latency (L_pi - n) and the 1-bit-wide network follow the paper;
// the step-list interface is this design's.
module recovery
  import bpl_pkg::*;
#(
  parameter int N    = 1024,
  parameter int NS   = 10,
  parameter int MAXS = NS*(NS-1)/2,
  parameter int CW   = $clog2(MAXS+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [N-1:0]  u_in,
  input  stage_t        steps [MAXS],
  input  logic [CW-1:0] nsteps,
  output logic [N-1:0]  u_out,
  output logic          valid,
  output logic          busy
);
  stage_t        prog [MAXS];
  logic [CW-1:0] cnt;
  logic [0:0]    din  [N];
  logic [0:0]    dout [N];
  stage_t        k_sel;

  always_comb begin
    for (int i = 0; i < N; i++) din[i] = u_out[i];
    k_sel = (cnt != '0) ? prog[cnt - 1'b1] : stage_t'(NS-1);
  end

  shuffle_net #(.N(N), .NS(NS), .W(1)) u_net (.din(din), .k(k_sel), .dout(dout));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u_out <= '0;
      cnt   <= '0;
      valid <= 1'b0;
      for (int m = 0; m < MAXS; m++) prog[m] <= '0;
    end else if (start) begin
      u_out <= u_in;
      prog  <= steps;
      cnt   <= nsteps;
      valid <= (nsteps == '0);
    end else if (cnt != '0) begin
      for (int i = 0; i < N; i++) u_out[i] <= dout[i][0];
      cnt   <= cnt - 1'b1;
      valid <= (cnt == CW'(1));
    end
  end

  assign busy = (cnt != '0);
endmodule
