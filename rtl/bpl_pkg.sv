// bpl_pkg: types, constants and arithmetic shared by the belief-propagation
// list (BPL) decoder.
//
// LLRs are Q7.2 two's-complement numbers (1 sign bit, 4 integer bits, 2
// fraction bits), as in the quantised decoder of the reference design, so one
// LSB is 0.25. Arithmetic saturates symmetrically to +/-LLR_MAX; the most
// positive value also stands for the "+infinity" a-priori LLR of a frozen bit.
// oms_g() is the offset min-sum kernel g(a,b,beta) =
// sgn(a)sgn(b)max(min(|a|,|b|)-beta,0) with beta_R = 0.25 (one LSB) and
// beta_L = 0, both from the reference design. The CRC is the 5G NR CRC-11
// x^11+x^10+x^9+x^5+1. Symmetric saturation and the stage-index width are
// choices of this implementation.
package bpl_pkg;
  localparam int Q      = 7;                 // LLR width (Q7.2)
  localparam int QF     = 2;                 // fraction bits
  localparam int SW     = 4;                 // width of a stage index (n <= 16)
  localparam int BETA_R = 1;                 // 0.25 in LSBs
  localparam int BETA_L = 0;
  localparam int CRC_W  = 11;
  localparam logic [CRC_W-1:0] CRC_POLY = 11'h621; // x^10+x^9+x^5+1 (x^11 implied)

  typedef logic signed [Q-1:0] llr_t;
  typedef logic [SW-1:0]       stage_t;

  localparam llr_t LLR_MAX = llr_t'((1 << (Q-1)) - 1);

  // Saturate a wider signed value to the symmetric LLR range.
  function automatic llr_t sat(input logic signed [Q+1:0] x);
    logic signed [Q+1:0] mx;
    mx = (Q+2)'(LLR_MAX);
    if (x > mx)       return LLR_MAX;
    else if (x < -mx) return -LLR_MAX;
    else                                      return llr_t'(x);
  endfunction

  function automatic llr_t add_sat(input llr_t a, input llr_t b);
    logic signed [Q+1:0] s;
    s = (Q+2)'(a) + (Q+2)'(b);
    return sat(s);
  endfunction

  // Offset min-sum kernel.
  function automatic llr_t oms_g(input llr_t a, input llr_t b, input int beta);
    logic [Q-1:0] ma, mb, mn;
    logic signed [Q+1:0] m;
    logic neg;
    ma  = a[Q-1] ? Q'(-a) : Q'(a);
    mb  = b[Q-1] ? Q'(-b) : Q'(b);
    mn  = (ma < mb) ? ma : mb;
    m   = $signed((Q+2)'(mn)) - (Q+2)'(beta);
    if (m < 0) m = '0;
    neg = a[Q-1] ^ b[Q-1];
    if ((a == '0) || (b == '0)) m = '0;
    return neg ? llr_t'(-m) : llr_t'(m);
  endfunction

  // Hard decision: 1 if x < 0.
  function automatic logic hd(input llr_t x);
    return x[Q-1];
  endfunction

  // Bit-index permutation of the sub-routing V_{k,k+1}: swap index bits k and k+1.
  function automatic int unsigned swap_adj(input int unsigned idx, input int k);
    int unsigned b0, b1, r;
    b0 = (idx >> k) & 1;
    b1 = (idx >> (k+1)) & 1;
    r  = idx & ~((32'd3) << k);
    return r | (b0 << (k+1)) | (b1 << k);
  endfunction

  // updateStage() of the decomposition algorithm.
  function automatic stage_t update_stage(input stage_t pin, input stage_t s, input stage_t e);
    stage_t lo, hi;
    lo = (s < e) ? s : e;
    hi = (s < e) ? e : s;
    if (pin == s)                              return e;
    else if ((pin >= lo) && (pin <= hi) && (s != e))
      return (s > e) ? pin + 1'b1 : pin - 1'b1;
    else                                       return pin;
  endfunction
endpackage
