// tb_util_pkg: helpers shared by the testbenches. Conversions between the
// 32-bit float bit pattern and a real, built from the exponent and fraction
// fields, give reference values that do not depend on the design's own
// arithmetic; near() compares with relative and absolute tolerances.
package tb_util_pkg;
  function automatic real fp2r(input logic [31:0] b);
    real m;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    m = m * (2.0 ** (real'(b[30:23]) - 127.0));
    return b[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2fp(input real r);
    logic [63:0] d;
    int          e;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), d[51:29]};
  endfunction

  function automatic bit near(input real got, input real exp, input real rel, input real abs_tol);
    real d;
    d = got - exp;
    if (d < 0.0) d = -d;
    return d <= abs_tol + rel * ((exp < 0.0) ? -exp : exp);
  endfunction

  // uniformly distributed real in [lo, hi)
  function automatic real urand_r(input real lo, input real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction
endpackage
