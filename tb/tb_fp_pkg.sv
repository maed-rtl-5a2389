// tb_fp_pkg -- reference helpers for the testbenches: exact conversion between single-
// precision bit patterns and the simulator's double-precision real, and tolerance checks.
//
// fp2r widens a single-precision pattern to a double by moving the exponent to the double
// bias and the fraction to the top of the 52-bit field (exact). r2fp rounds a double to the
// nearest single-precision pattern (ties to even), flushing results below the normal range
// to zero. The references of the testbenches are computed in double precision with these
// helpers, independently of the design's arithmetic.
package tb_fp_pkg;

  function automatic real fp2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'h00) return 0.0;
    if (f[30:23] == 8'hFF) begin
      d = {f[31], 11'h7FF, f[22:0], 29'd0};
      return $bitstoreal(d);
    end
    d = {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2fp(real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [24:0] mr;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) return {s, 8'hFF, (d[51:0] != 0) ? 23'h400000 : 23'd0};
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b1, d[51:0]};
    mr = {1'b0, m[52:29]};
    g  = m[28];
    st = |m[27:0];
    if (g && (st || mr[0])) mr = mr + 25'd1;
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e >= 255) return {s, 8'hFF, 23'd0};
    if (e <= 0) return {s, 31'd0};
    return {s, 8'(e), mr[22:0]};
  endfunction

  // |got - want| <= rel * |want| + abs_tol
  function automatic bit close(real got, real want, real rel, real abs_tol);
    real diff, mag;
    diff = got - want;
    if (diff < 0.0) diff = -diff;
    mag = (want < 0.0) ? -want : want;
    return diff <= rel * mag + abs_tol;
  endfunction

  // 2.0 raised to an integer power.
  function automatic real pow2(int e);
    real r;
    r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // Uniform random real in [lo, hi].
  function automatic real urand_real(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967295.0);
  endfunction

  // e^x (neg = 0) or e^-x (neg = 1) truncated after n terms, in double precision.
  function automatic real series_exp(real x, int n, bit neg);
    real t, s;
    t = 1.0;
    s = 1.0;
    for (int k = 1; k <= n; k++) begin
      t = t * x / k;
      s = s + ((neg && (k % 2 == 1)) ? -t : t);
    end
    return s;
  endfunction

endpackage
