// tb_fp16_pkg: reference half-precision arithmetic for the testbenches.
//
// Values are converted to double precision, where FP16 sums and products are
// exact, and rounded back to FP16 (nearest, ties to even) from the double's
// bit pattern. Subnormals are flushed to zero, as the design does, and +0 and
// -0 count as equal in comparisons.
package tb_fp16_pkg;

  function automatic real h2r(logic [15:0] h);
    int e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2h(real r);
    logic [63:0] bits;
    logic        s;
    int          e;
    logic [52:0] m53;
    logic [11:0] mant;
    logic        g, st;
    bits = $realtobits(r);
    s = bits[63];
    if (bits[62:0] == 63'd0) return {s, 15'd0};
    e = int'(bits[62:52]) - 1023;
    m53 = {1'b1, bits[51:0]};
    mant = {1'b0, m53[52:42]};
    g  = m53[41];
    st = |m53[40:0];
    if (g && (st || mant[0])) mant = mant + 1;
    if (mant[11]) begin
      mant = mant >> 1;
      e = e + 1;
    end
    e = e + 15;
    if (e <= 0)  return {s, 15'd0};
    if (e >= 31) return {s, 15'h7C00};
    return {s, e[4:0], mant[9:0]};
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    return r2h(h2r(a) + h2r(b));
  endfunction

  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    return r2h(h2r(a) * h2r(b));
  endfunction

  function automatic logic h_eq(logic [15:0] a, logic [15:0] b);
    if (a[14:0] == 15'd0 && b[14:0] == 15'd0) return 1'b1;
    return a == b;
  endfunction

  // Random finite FP16 value with exponent in [lo, hi].
  function automatic logic [15:0] rand_h(int lo, int hi);
    logic [15:0] v;
    int e;
    e = lo + int'($urandom_range(hi - lo));
    v = {1'($urandom), e[4:0], 10'($urandom)};
    return v;
  endfunction

  // Small multiple of 1/8 in [-4, 4): sums of a few hundred of them stay exact.
  function automatic logic [15:0] rand_small();
    int k;
    k = int'($urandom_range(63)) - 32;
    return r2h(real'(k) / 8.0);
  endfunction

endpackage
