// flairs_ref_pkg: reference arithmetic for the FLAIRS testbenches.
//
// Bit-exact models of the kernel's fixed-point results, written as plain
// sequential code on 64-bit integers: floor square root, cosine distance,
// clipping scale, median, signed truncating division and the MT19937
// generator. Values are kept small enough in the tests that 64 bits never
// overflow.
package flairs_ref_pkg;
  localparam int FRAC = 16;
  localparam longint ONE = 64'sd1 <<< FRAC;

  function automatic longint unsigned isqrt(longint unsigned x);
    longint unsigned r;
    r = longint'($sqrt(real'(x)));
    while (r * r > x) r--;
    while ((r + 1) * (r + 1) <= x) r++;
    return r;
  endfunction

  // dist = 1 - clamp(|dot| << 16 / (n_i*n_j)) with the sign of dot
  function automatic longint cos_dist(longint dot, longint unsigned ni, longint unsigned nj);
    longint unsigned den, mag, q;
    den = ni * nj;
    if (den == 0) return ONE;
    mag = (dot < 0) ? longint'(-dot) : longint'(dot);
    q = (mag << FRAC) / den;
    if (q > ONE) q = ONE;
    return (dot < 0) ? ONE + longint'(q) : ONE - longint'(q);
  endfunction

  function automatic longint clip_scale(longint unsigned med, longint unsigned nrm);
    longint unsigned q;
    if (nrm == 0) return ONE;
    q = (med << FRAC) / nrm;
    return (q > ONE) ? ONE : longint'(q);
  endfunction

  function automatic longint sdiv(longint a, longint b);
    longint unsigned m;
    m = (a < 0) ? longint'(-a) : longint'(a);
    m = m / longint'(b);
    return (a < 0) ? -longint'(m) : longint'(m);
  endfunction

  // arithmetic shift right by FRAC of a product, as the RTL truncates
  function automatic longint fmul(longint a, longint b);
    return (a * b) >>> FRAC;
  endfunction

  // MT19937 reference (state kept by the caller)
  function automatic void mt_seed(ref int unsigned st[624], input int unsigned s);
    st[0] = s;
    for (int i = 1; i < 624; i++) st[i] = 32'd1812433253 * (st[i-1] ^ (st[i-1] >> 30)) + i;
  endfunction

  function automatic int unsigned mt_next(ref int unsigned st[624], ref int idx);
    int unsigned y, v;
    if (idx == 624) begin
      for (int i = 0; i < 624; i++) begin
        y = (st[i] & 32'h8000_0000) | (st[(i+1) % 624] & 32'h7fff_ffff);
        st[i] = st[(i+397) % 624] ^ (y >> 1) ^ ((y[0]) ? 32'h9908_b0df : 32'h0);
      end
      idx = 0;
    end
    v = st[idx];
    idx++;
    v ^= (v >> 11);
    v ^= (v << 7) & 32'h9d2c_5680;
    v ^= (v << 15) & 32'hefc6_0000;
    v ^= (v >> 18);
    return v;
  endfunction
endpackage
