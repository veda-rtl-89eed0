// tb_util_pkg: reference arithmetic for the testbenches.
// Converts between FP16 bit patterns and `real`, so expected results are
// computed in double precision, independently of the design's FP16 operators.
package tb_util_pkg;
  function automatic real fp2r(logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    if (e == 31) return h[15] ? -1.0e30 : 1.0e30;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    m = m * (2.0 ** (e - 15));
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] r2fp(real r);
    logic s;
    int   e;
    real  a;
    int   m;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < 6.2e-5) return {s, 15'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    m = int'((a - 1.0) * 1024.0);  // rounds to nearest
    if (m == 1024) begin m = 0; e++; end
    if (e + 15 >= 31) return {s, 15'h7C00};
    return {s, 5'(e + 15), 10'(m)};
  endfunction

  function automatic bit close(real got, real exp, real rel, real abs_tol);
    real d;
    d = got - exp;
    if (d < 0.0) d = -d;
    return d <= abs_tol + rel * (exp < 0.0 ? -exp : exp);
  endfunction

  // random FP16 value uniformly in [lo, hi)
  function automatic logic [15:0] rnd_fp(real lo, real hi);
    return r2fp(lo + (hi - lo) * real'($urandom % 65536) / 65536.0);
  endfunction
endpackage
