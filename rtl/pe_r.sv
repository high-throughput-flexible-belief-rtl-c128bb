// pe_r: one right-going processing element of the BP factor graph.
//
// A butterfly of stage j joins bit rows i (upper) and i+2^j (lower). Given
// R_{i,j}, R_{i+2^j,j} (this iteration) and L_{i,j+1}, L_{i+2^j,j+1} (latest
// available), it produces the offset min-sum updates
//   R_{i,j+1}     = g(R_{i,j}, L_{i+2^j,j+1} + R_{i+2^j,j}, beta_R)
//   R_{i+2^j,j+1} = g(R_{i,j}, L_{i,j+1}, beta_R) + R_{i+2^j,j}
// exactly as the paper's update equations. Purely combinational; the inner
// sum and the final addition saturate to Q bits (a choice of this design).
module pe_r
  import bpl_pkg::*;
(
  input  llr_t r_up,   // R_{i,j}
  input  llr_t r_dn,   // R_{i+2^j,j}
  input  llr_t l_up,   // L_{i,j+1}
  input  llr_t l_dn,   // L_{i+2^j,j+1}
  output llr_t o_up,   // R_{i,j+1}
  output llr_t o_dn    // R_{i+2^j,j+1}
);
  always_comb begin
    o_up = oms_g(r_up, add_sat(l_dn, r_dn), BETA_R);
    o_dn = add_sat(oms_g(r_up, l_up, BETA_R), r_dn);
  end
endmodule
