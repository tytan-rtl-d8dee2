// tb_fp_pkg: reference FP32 arithmetic for the testbenches.
//
// Reference results are computed in double precision and rounded once to FP32
// (round to nearest-even, results below the normal range flushed to zero).
// For +, -, * and / of FP32 operands this single double-precision rounding
// followed by a rounding to FP32 gives the correctly rounded FP32 result,
// because double carries more than twice the FP32 significand plus two bits.
// This is independent of the RTL's integer significand arithmetic.
package tb_fp_pkg;

  function automatic real f2r(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(f[30:23]) - 11'd127 + 11'd1023, f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    logic        g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e  = int'(d[62:52]) - 1023 + 127;
    m  = {1'b0, d[51:29]};
    g  = d[28];
    st = |d[27:0];
    if (g && (st || m[0])) m = m + 24'd1;
    if (m[23]) begin
      m = '0;
      e = e + 1;
    end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction

  // Random FP32 value with biased exponent in [emin, emax].
  function automatic logic [31:0] rand_fp(int emin, int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  function automatic logic [31:0] fp_mul_ref(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) * f2r(b));
  endfunction

  function automatic logic [31:0] fp_add_ref(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  function automatic logic [31:0] fp_div_ref(logic [31:0] a, logic [31:0] b);
    return r2f(f2r(a) / f2r(b));
  endfunction

  // Horner evaluation as the core performs it, each step rounded to FP32:
  // acc = 0; for each stored coefficient (highest order first) acc = acc*x + c.
  function automatic logic [31:0] poly_ref(logic [31:0] c [], int n, logic [31:0] x);
    logic [31:0] acc;
    acc = 32'h0;
    for (int i = 0; i < n; i++) acc = fp_add_ref(fp_mul_ref(acc, x), c[i]);
    return acc;
  endfunction

  // Taylor coefficients of e^x, stored highest order first: entry i = 1/(n-1-i)!.
  function automatic void exp_coefs(ref logic [31:0] c [], input int n);
    real f;
    c = new[n];
    f = 1.0;
    for (int k = 0; k < n; k++) begin
      if (k > 0) f = f * real'(k);
      c[n-1-k] = r2f(1.0 / f);
    end
  endfunction

  // Taylor coefficients of log(1+u) in u, highest order first.
  function automatic void log1p_coefs(ref logic [31:0] c [], input int n);
    c = new[n];
    c[n-1] = 32'h0;
    for (int k = 1; k < n; k++) c[n-1-k] = r2f(((k % 2 == 1) ? 1.0 : -1.0) / real'(k));
  endfunction

  // Taylor coefficients of sigmoid(x) = 1/(1+e^-x) around 0, highest order
  // first, by power-series division of 1 by (1 + e^-x).
  function automatic void sigmoid_coefs(ref logic [31:0] c [], input int n);
    real a [], b [], f;
    a = new[n];
    b = new[n];
    f = 1.0;
    for (int k = 0; k < n; k++) begin
      if (k > 0) f = f * real'(k);
      a[k] = ((k % 2 == 0) ? 1.0 : -1.0) / f;
    end
    a[0] = 2.0;
    b[0] = 0.5;
    for (int m = 1; m < n; m++) begin
      real s;
      s = 0.0;
      for (int k = 1; k <= m; k++) s = s + a[k] * b[m-k];
      b[m] = -s / a[0];
    end
    c = new[n];
    for (int k = 0; k < n; k++) c[n-1-k] = r2f(b[k]);
  endfunction

endpackage
