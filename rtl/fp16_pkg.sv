// fp16_pkg: half-precision (IEEE binary16 layout) arithmetic used by every datapath block.
//
// All operators are combinational functions so that each call site becomes one
// hardware operator (a multiplier, an adder, an exponential unit, a divider or a
// square root).  The format follows the accelerator's FP16 default; the
// simplifications are this design's own: subnormal inputs and results are
// flushed to zero, there is no NaN, overflow saturates to infinity, and results
// are rounded half away from zero.  The exponential uses exp(x) = 2^(x*log2 e)
// with a quadratic fit of 2^f on the fractional part (fit exact at f = 0, 0.5,
// 1; error below 0.2 %).
package fp16_pkg;

  typedef logic [15:0] fp16_t;

  localparam fp16_t FP_ZERO    = 16'h0000;
  localparam fp16_t FP_ONE     = 16'h3C00;
  localparam fp16_t FP_POS_INF = 16'h7C00;
  localparam fp16_t FP_NEG_INF = 16'hFC00;
  localparam fp16_t FP_LOG2E   = 16'h3DC5;  // 1.4427

  function automatic logic fp_is_zero(fp16_t a);
    return a[14:10] == 5'd0;
  endfunction

  function automatic logic fp_is_inf(fp16_t a);
    return a[14:10] == 5'd31;
  endfunction

  function automatic fp16_t fp_neg(fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // Pack sign, biased exponent (may be out of range) and an 11-bit mantissa with
  // hidden bit set, plus one round bit.
  function automatic fp16_t fp_pack(logic s, int e, logic [10:0] m, logic rnd);
    logic [11:0] mr;
    int          ee;
    mr = {1'b0, m} + 12'(rnd);
    ee = e;
    if (mr[11]) begin
      mr = mr >> 1;
      ee = ee + 1;
    end
    if (ee >= 31) return {s, 15'h7C00};
    if (ee <= 0) return {s, 15'h0000};
    return {s, ee[4:0], mr[9:0]};
  endfunction

  function automatic fp16_t fp_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [21:0] p;
    int          e;
    s = a[15] ^ b[15];
    if (fp_is_inf(a) || fp_is_inf(b)) return {s, 15'h7C00};
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 15'h0000};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) return fp_pack(s, e + 1, p[21:11], p[10]);
    return fp_pack(s, e, p[20:10], p[9]);
  endfunction

  function automatic fp16_t fp_add(fp16_t a, fp16_t b);
    fp16_t       big, sml;
    int          d, e, sh;
    logic [14:0] mb, ms, r;
    logic        sticky;
    if (fp_is_zero(a)) return fp_is_zero(b) ? FP_ZERO : b;
    if (fp_is_zero(b)) return a;
    if (fp_is_inf(a)) return a;
    if (fp_is_inf(b)) return b;
    if (a[14:0] >= b[14:0]) begin
      big = a;
      sml = b;
    end else begin
      big = b;
      sml = a;
    end
    d  = int'(big[14:10]) - int'(sml[14:10]);
    e  = int'(big[14:10]);
    mb = {1'b0, 1'b1, big[9:0], 3'b000};
    ms = {1'b0, 1'b1, sml[9:0], 3'b000};
    if (d > 13) begin
      ms = 15'd1;
    end else begin
      sticky = 1'b0;
      for (int i = 0; i < 14; i++) if (i < d && ms[i]) sticky = 1'b1;
      ms = (ms >> d) | 15'(sticky);
    end
    if (big[15] == sml[15]) begin
      r = mb + ms;
      if (r[14]) begin
        r = (r >> 1) | 15'(r[0]);
        e = e + 1;
      end
    end else begin
      r = mb - ms;
      if (r == 15'd0) return FP_ZERO;
      sh = 0;
      for (int i = 0; i < 13; i++) if (r[13-sh] == 1'b0) sh = sh + 1;
      r = r << sh;
      e = e - sh;
    end
    return fp_pack(big[15], e, r[13:3], r[2]);
  endfunction

  function automatic fp16_t fp_sub(fp16_t a, fp16_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  // a < b, treating +0 and -0 as equal
  function automatic logic fp_lt(fp16_t a, fp16_t b);
    logic az, bz;
    az = fp_is_zero(a);
    bz = fp_is_zero(b);
    if (az && bz) return 1'b0;
    if (az) return !b[15];
    if (bz) return a[15];
    if (a[15] != b[15]) return a[15];
    if (!a[15]) return a[14:0] < b[14:0];
    return a[14:0] > b[14:0];
  endfunction

  function automatic fp16_t fp_max(fp16_t a, fp16_t b);
    return fp_lt(a, b) ? b : a;
  endfunction

  function automatic fp16_t fp_div(fp16_t a, fp16_t b);
    logic        s;
    logic [22:0] q;
    int          e;
    s = a[15] ^ b[15];
    if (fp_is_zero(b) || fp_is_inf(a)) return {s, 15'h7C00};
    if (fp_is_zero(a) || fp_is_inf(b)) return {s, 15'h0000};
    // ({1,ma} << 12) / {1,mb} lies in (2^11, 2^13)
    q = {1'b1, a[9:0], 12'd0} / {12'd0, 1'b1, b[9:0]};
    e = int'(a[14:10]) - int'(b[14:10]) + 15;
    if (q[12]) return fp_pack(s, e, q[12:2], q[1]);
    return fp_pack(s, e - 1, q[11:1], q[0]);
  endfunction

  // square root of a non-negative number; negative inputs give zero
  function automatic fp16_t fp_sqrt(fp16_t a);
    logic [21:0] x;
    logic [10:0] r;
    logic [21:0] t;
    int          eu;
    if (fp_is_zero(a) || a[15]) return FP_ZERO;
    if (fp_is_inf(a)) return FP_POS_INF;
    eu = int'(a[14:10]) - 15;
    if (eu % 2 != 0) begin
      x  = {1'b1, a[9:0], 11'd0};  // mantissa * 2, scaled by 2^10
      eu = eu - 1;
    end else begin
      x = {1'b0, 1'b1, a[9:0], 10'd0};
    end
    // bit-by-bit integer square root, result in [1024, 2048)
    r = 11'd0;
    for (int i = 10; i >= 0; i--) begin
      t = 22'(r) | (22'd1 << i);
      if (t * t <= 44'(x)) r = r | (11'd1 << i);
    end
    return fp_pack(1'b0, eu / 2 + 15, r, 1'b0);
  endfunction

  // e^x
  function automatic fp16_t fp_exp(fp16_t x);
    fp16_t              y;
    int                 ey;
    logic signed [31:0] yf;   // Q21.10 fixed point of y = x*log2(e)
    logic signed [31:0] n;
    logic        [9:0]  f;
    logic        [31:0] t, p;
    if (fp_is_inf(x)) return x[15] ? FP_ZERO : FP_POS_INF;
    y  = fp_mul(x, FP_LOG2E);
    if (fp_is_zero(y)) return FP_ONE;
    ey = int'(y[14:10]) - 15;  // |y| lies in [2^ey, 2^(ey+1))
    if (ey >= 5) return y[15] ? FP_ZERO : FP_POS_INF;
    if (ey <= -11) return FP_ONE;
    if (ey >= 0) yf = 32'({1'b1, y[9:0]}) << ey;
    else yf = 32'({1'b1, y[9:0]}) >> (-ey);
    if (y[15]) yf = -yf;
    n = yf >>> 10;
    f = yf[9:0];
    // 2^f ~= 1 + f*(0.65685 + 0.34315 f), coefficients in Q.12: 2690, 1406
    t = 32'd2690 + ((32'd1406 * 32'(f)) >> 10);
    p = (t * 32'(f)) >> 12;  // Q.10
    if (p > 32'd1023) p = 32'd1023;
    return fp_pack(1'b0, int'(n) + 15, {1'b1, p[9:0]}, 1'b0);
  endfunction

  function automatic fp16_t fp_from_uint(logic [15:0] v);
    int sh;
    logic [15:0] m;
    if (v == 16'd0) return FP_ZERO;
    sh = 0;
    for (int i = 15; i >= 0; i--) if (v[i] && sh == 0) sh = i + 1;
    // sh-1 is the position of the leading one
    m = v << (16 - sh);  // leading one at bit 15
    return fp_pack(1'b0, sh - 1 + 15, m[15:5], m[4]);
  endfunction

endpackage
