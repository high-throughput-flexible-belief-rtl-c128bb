// shuffle_net: the n-1 fixed sub-routings V_{k,k+1} (k = 0..n-2) and the MUX
// that picks one of them, i.e. the routing core of the basic shuffling unit.
//
// Sub-routing V_{k,k+1} splits the length-N vector into groups of 2^(k+2)
// elements and exchanges the second and third quarter of every group, which
// is the same as swapping bits k and k+1 of every element's index:
//   dout[idx] = din[idx with bits k and k+1 swapped].
// (The paper writes V_{i-1,i} for i = 1..n-1; here k = i-1.) Each routing is
// fixed wiring; `k` selects one, and a `k` of n-1 or more passes din through.
// Combinational. The element width W is a parameter so that the same network
// shuffles Q-bit LLRs in the PGU and single bits in the recovery module.
module shuffle_net
  import bpl_pkg::*;
#(
  parameter int N  = 1024,   // code length
  parameter int NS = 10,     // n = log2(N)
  parameter int W  = Q       // element width
) (
  input  logic [W-1:0] din  [N],
  input  stage_t       k,
  output logic [W-1:0] dout [N]
);
  // One output multiplexer per element, built with a generate loop so that
  // no procedural loop has to be unrolled over all N elements.
  for (genvar idx = 0; idx < N; idx++) begin : g_out
    always_comb begin
      dout[idx] = din[idx];
      for (int kk = 0; kk < NS-1; kk++)
        if (k == stage_t'(kk)) dout[idx] = din[swap_adj(idx, kk)];
    end
  end
endmodule
