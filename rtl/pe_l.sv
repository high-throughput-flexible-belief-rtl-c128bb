// pe_l: one left-going processing element of the BP factor graph.
//
// For the butterfly of stage j joining rows i and i+2^j, it produces
//   L_{i,j}     = g(L_{i,j+1}, L_{i+2^j,j+1} + R_{i+2^j,j}, beta_L)
//   L_{i+2^j,j} = g(L_{i,j+1}, R_{i,j}, beta_L) + L_{i+2^j,j+1}
// from the paper's update equations, with beta_L = 0. Purely combinational;
// additions saturate to Q bits (a choice of this design).
module pe_l
  import bpl_pkg::*;
(
  input  llr_t l_up,   // L_{i,j+1}
  input  llr_t l_dn,   // L_{i+2^j,j+1}
  input  llr_t r_up,   // R_{i,j}
  input  llr_t r_dn,   // R_{i+2^j,j}
  output llr_t o_up,   // L_{i,j}
  output llr_t o_dn    // L_{i+2^j,j}
);
  always_comb begin
    o_up = oms_g(l_up, add_sat(l_dn, r_dn), BETA_L);
    o_dn = add_sat(oms_g(l_up, r_up, BETA_L), l_dn);
  end
endmodule
