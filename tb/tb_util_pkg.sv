// tb_util_pkg: reference functions shared by the testbenches, written
// independently of the RTL: polar encoding, the CRC-11 as a serial LFSR,
// a polarization-weight code construction, Q7.2 quantisation, the offset
// min-sum kernel in integer arithmetic, and the PFG decomposition into
// sub-routing steps (the paper's decomposition algorithm) with a routine
// that applies the steps to an index-addressed vector.
package tb_util_pkg;
  typedef int int_q [$];

  function automatic int satq(input int x);
    if (x > 63) return 63;
    if (x < -63) return -63;
    return x;
  endfunction

  function automatic int gref(input int a, input int b, input int beta);
    int ma, mb, m, sg;
    ma = (a < 0) ? -a : a;
    mb = (b < 0) ? -b : b;
    m  = ((ma < mb) ? ma : mb) - beta;
    if (m < 0) m = 0;
    if (a == 0 || b == 0) return 0;
    sg = ((a < 0) != (b < 0)) ? -1 : 1;
    return sg * m;
  endfunction

  // x = u * F^{(x)n}
  function automatic int_q encode(input int_q u);
    int_q x;
    int n_len;
    x = u;
    n_len = x.size();
    for (int s = 1; s < n_len; s = s * 2)
      for (int i = 0; i < n_len; i++)
        if ((i & s) == 0) x[i] = x[i] ^ x[i + s];
    return x;
  endfunction

  // CRC-11 remainder of a bit sequence (first bit = highest power).
  function automatic int crc11(input int_q bits);
    int r;
    r = 0;
    foreach (bits[i]) begin
      int fb;
      fb = ((r >> 10) & 1) ^ bits[i];
      r  = (r << 1) & 32'h7ff;
      if (fb != 0) r = r ^ 32'h621;
    end
    return r;
  endfunction

  // Frozen mask (1 = frozen) from polarization weights, kinfo most reliable
  // positions unfrozen.
  function automatic int_q pw_frozen(input int nlen, input int kinfo);
    real w [];
    int_q fz;
    w = new[nlen];
    for (int i = 0; i < nlen; i++) begin
      w[i] = 0.0;
      for (int b = 0; b < 16; b++) if (((i >> b) & 1) != 0) w[i] += 2.0 ** (0.25 * b);
      fz.push_back(1);
    end
    for (int k = 0; k < kinfo; k++) begin
      int best;
      best = -1;
      for (int i = 0; i < nlen; i++)
        if (fz[i] == 1 && (best < 0 || w[i] > w[best])) best = i;
      fz[best] = 0;
    end
    return fz;
  endfunction

  // Decomposition of a PFG stage order into the sequence of sub-routing
  // indices k (one V_{k,k+1} each), following the paper's algorithm.
  function automatic int_q decompose(input int_q pfg);
    int_q steps;
    int_q w;
    int n;
    w = pfg;
    n = w.size();
    for (int i = 0; i < n; i++) begin
      int s, e, lo, hi;
      s = w[i]; e = i;
      lo = (s < e) ? s : e; hi = (s < e) ? e : s;
      for (int j = i; j < n; j++) begin
        if (w[j] == s) w[j] = e;
        else if (w[j] >= lo && w[j] <= hi && s != e) w[j] = w[j] + ((s > e) ? 1 : -1);
      end
      if (s > e) for (int k = s - 1; k >= e; k--) steps.push_back(k);
      else if (s < e) for (int k = s; k <= e - 1; k++) steps.push_back(k);
    end
    return steps;
  endfunction

  // One sub-routing V_{k,k+1} on a vector: groups of 2^(k+2) elements, the
  // second and third quarters of each group are exchanged.
  function automatic int_q route(input int_q v, input int k);
    int_q o;
    int q, g;
    o = v;
    q = 1 << k;
    g = 4 * q;
    for (int base = 0; base < v.size(); base += g)
      for (int t = 0; t < q; t++) begin
        o[base + q + t]     = v[base + 2*q + t];
        o[base + 2*q + t]   = v[base + q + t];
      end
    return o;
  endfunction

  function automatic int_q apply_steps(input int_q v, input int_q steps);
    int_q o;
    o = v;
    foreach (steps[i]) o = route(o, steps[i]);
    return o;
  endfunction

  function automatic int quant(input real llr);
    int q;
    q = $rtoi(llr * 4.0 + ((llr >= 0.0) ? 0.5 : -0.5));
    return satq(q);
  endfunction

  // Standard normal sample (Box-Muller).
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000, 1))) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction
endpackage
