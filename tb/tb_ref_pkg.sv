// tb_ref_pkg: bit-exact reference models for the testbenches of the 5D
// hyperchaotic random bit generator, written independently of the RTL with
// 64-bit integer arithmetic.
//
//   ref_f       vector field F(S) in Q4.27
//   ref_step    one Runge-Kutta-4 step with step 2^-hs (k-terms by
//               arithmetic shifts, weighted sum k1+2k2+2k3+k4 at full
//               precision, times the rounded constant round(2^(27-hs)/6),
//               shifted right by 27, added to S with 32-bit wrap)
//   ref_scr_*   the data scrambler as four 6-bit shift registers held in
//               one 24-bit vector
package tb_ref_pkg;

  typedef int signed vec5_t [5];   // x, y, z, u, v

  localparam longint ONE = 64'sd1 << 27;

  function automatic int wrap(longint a);
    return int'(a);
  endfunction

  function automatic int fmul(int a, int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 27);
  endfunction

  function automatic vec5_t ref_f(vec5_t s);
    vec5_t f;
    int xm1;
    xm1  = wrap(longint'(s[0]) - ONE);
    f[0] = s[1];
    f[1] = s[2];
    f[2] = s[3];
    f[3] = wrap(longint'(fmul(xm1, s[1])) - longint'(wrap(longint'(s[2]) + longint'(int'(s[3] >>> 1)))));
    f[4] = wrap(longint'(fmul(xm1, s[2])) - longint'(wrap(longint'(s[3]) + longint'(int'(s[4] >>> 1)))));
    return f;
  endfunction

  function automatic vec5_t ref_axpy(vec5_t s, vec5_t k, int sh);
    vec5_t r;
    for (int i = 0; i < 5; i++) r[i] = wrap(longint'(s[i]) + longint'(int'(k[i] >>> sh)));
    return r;
  endfunction

  function automatic int h6(int hs);
    return int'(((64'sd1 << (27 - hs)) * 2 + 6) / 12);  // round(2^(27-hs)/6)
  endfunction

  function automatic vec5_t ref_step(vec5_t s, int hs);
    vec5_t k1, k2, k3, k4, r;
    k1 = ref_f(s);
    k2 = ref_f(ref_axpy(s, k1, hs + 1));
    k3 = ref_f(ref_axpy(s, k2, hs + 1));
    k4 = ref_f(ref_axpy(s, k3, hs));
    for (int i = 0; i < 5; i++) begin
      longint acc;   // full-precision weighted sum
      acc  = 2 * (longint'(k2[i]) + longint'(k3[i])) + (longint'(k1[i]) + longint'(k4[i]));
      r[i] = wrap(longint'(s[i]) + ((acc * longint'(h6(hs))) >>> 27));
    end
    return r;
  endfunction

  // Scrambler state: bits [5:0] = A, [11:6] = B, [17:12] = C, [23:18] = D,
  // bit 0 of each group is its first flip-flop.
  function automatic bit ref_scr_out(bit [23:0] st);
    bit fb;
    fb = st[18] ^ st[23];
    return st[0] ^ fb;
  endfunction

  function automatic bit [23:0] ref_scr_next(bit [23:0] st, bit v);
    bit fa, fb;
    bit [5:0] a, b, c, d;
    a  = st[5:0];  b = st[11:6];  c = st[17:12];  d = st[23:18];
    fa = b[0] ^ b[5];
    fb = d[0] ^ d[5];
    a  = {a[4:0], v ^ fa};
    b  = {b[4:0], st[5] ^ fb};
    c  = {c[4:0], st[0] ^ fb};
    d  = {d[4:0], st[17] ^ fa};
    return {d, c, b, a};
  endfunction

endpackage
