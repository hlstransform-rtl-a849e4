// fp32_pkg: single-precision (IEEE-754 binary32) arithmetic used by every datapath
// of the Llama 2 forward-pass kernel.
//
// The kernel keeps the residual stream, the RMSNorm weights, the quantisation scales
// and all nonlinear functions in float32, as the int8 (Q8_0) forward pass does; only
// the matrix-vector products run on integers. The functions below are combinational
// and synthesizable; each call is one adder or multiplier worth of logic. They round
// to nearest-even, flush subnormal inputs and results to zero, and return an
// infinity on overflow; NaN inputs propagate as the canonical quiet NaN. Flushing
// subnormals is a choice of this design (the numbers in a transformer forward pass
// do not reach that range).
//
// real_to_fp / fp_to_real convert to and from the simulator's double type; they are
// used only to build constants at elaboration time and in testbenches.
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3f80_0000;
  localparam fp32_t FP_INF  = 32'h7f80_0000;
  localparam fp32_t FP_NAN  = 32'h7fc0_0000;

  function automatic logic fp_is_zero(input fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_abs(input fp32_t a);
    return {1'b0, a[30:0]};
  endfunction

  // a > b for ordered (non-NaN) operands; zeros of either sign compare equal
  function automatic logic fp_gt(input fp32_t a, input fp32_t b);
    logic az, bz;
    az = fp_is_zero(a);
    bz = fp_is_zero(b);
    if (az && bz) return 1'b0;
    if (az) return b[31];
    if (bz) return !a[31];
    if (a[31] != b[31]) return !a[31];
    if (!a[31]) return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  // Round a normalised significand {1,frac23} with guard and sticky bits and pack.
  // e is the biased exponent before rounding.
  function automatic fp32_t fp_pack(input logic s, input int e, input logic [23:0] m,
                                    input logic g, input logic st);
    logic [24:0] mr;
    int er;
    mr = {1'b0, m};
    er = e;
    if (g && (st || m[0])) mr = mr + 25'd1;
    if (mr[24]) begin
      mr = mr >> 1;
      er = er + 1;
    end
    if (er >= 255) return {s, 8'hff, 23'd0};
    if (er <= 0) return {s, 31'd0};
    return {s, er[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    logic        sa, sb;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [27:0] xa, xb, sum;   // 1 carry bit, 24 significand bits, 3 round bits
    logic        st;
    int          d, e, lz;
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) begin
      if (a[30:23] == 8'hff && a[22:0] != 0) return FP_NAN;
      if (b[30:23] == 8'hff && b[22:0] != 0) return FP_NAN;
      if (a[30:23] == 8'hff && b[30:23] == 8'hff && a[31] != b[31]) return FP_NAN;
      return (a[30:23] == 8'hff) ? a : b;
    end
    if (fp_is_zero(a) && fp_is_zero(b)) return {a[31] & b[31], 31'd0};
    if (fp_is_zero(a)) return b;
    if (fp_is_zero(b)) return a;
    // order so that |a| >= |b|
    if (b[30:0] > a[30:0]) begin
      sa = b[31]; ea = b[30:23]; ma = {1'b1, b[22:0]};
      sb = a[31]; eb = a[30:23]; mb = {1'b1, a[22:0]};
    end else begin
      sa = a[31]; ea = a[30:23]; ma = {1'b1, a[22:0]};
      sb = b[31]; eb = b[30:23]; mb = {1'b1, b[22:0]};
    end
    d  = int'(ea) - int'(eb);
    xa = {1'b0, ma, 3'b000};
    if (d >= 27) begin
      xb = 28'd1;                       // only sticky survives
    end else begin
      xb = {1'b0, mb, 3'b000};
      st = 1'b0;
      for (int i = 0; i < 27; i++) if (i < d) st = st | xb[i];
      xb = xb >> d;
      xb[0] = xb[0] | st;
    end
    sum = (sa == sb) ? xa + xb : xa - xb;
    if (sum == 28'd0) return FP_ZERO;
    e = int'(ea);
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e = e + 1;
    end else begin
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - lz;
    end
    return fp_pack(sa, e, sum[26:3], sum[2], sum[1] | sum[0]);
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    s = a[31] ^ b[31];
    if ((a[30:23] == 8'hff && a[22:0] != 0) || (b[30:23] == 8'hff && b[22:0] != 0))
      return FP_NAN;
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) begin
      if (fp_is_zero(a) || fp_is_zero(b)) return FP_NAN;
      return {s, 8'hff, 23'd0};
    end
    if (fp_is_zero(a) || fp_is_zero(b)) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return fp_pack(s, e + 1, p[47:24], p[23], |p[22:0]);
    return fp_pack(s, e, p[46:23], p[22], |p[21:0]);
  endfunction

  // Signed 32-bit integer to float, round to nearest-even.
  function automatic fp32_t fp_from_int(input logic signed [31:0] v);
    logic        s;
    logic [31:0] u;
    logic [31:0] n;
    int          msb;
    if (v == 0) return FP_ZERO;
    s = v[31];
    u = s ? 32'(-v) : 32'(v);
    msb = 0;
    for (int i = 0; i < 32; i++) if (u[i]) msb = i;
    n = u << (31 - msb);                       // leading one at bit 31
    return fp_pack(s, 127 + msb, n[31:8], n[7], |n[6:0]);
  endfunction

  // Multiply by 2^k (k may be negative) by adjusting the exponent.
  function automatic fp32_t fp_ldexp(input fp32_t a, input int k);
    int e;
    if (fp_is_zero(a) || a[30:23] == 8'hff) return a;
    e = int'(a[30:23]) + k;
    if (e >= 255) return {a[31], 8'hff, 23'd0};
    if (e <= 0) return {a[31], 31'd0};
    return {a[31], e[7:0], a[22:0]};
  endfunction

  // Signed fixed-point value with fb fraction bits to float.
  function automatic fp32_t fp_from_fixed(input logic signed [31:0] v, input int fb);
    return fp_ldexp(fp_from_int(v), -fb);
  endfunction

  // Float to signed integer, rounding half away from zero (C roundf), saturating
  // to [-lim, lim].
  function automatic logic signed [31:0] fp_to_int_round(input fp32_t a, input int lim);
    int          e;
    logic [55:0] m;
    logic [31:0] mag;
    if (fp_is_zero(a)) return 32'sd0;
    e = int'(a[30:23]) - 127;
    if (e >= 30) mag = 32'(lim);
    else if (e < -1) mag = 32'd0;
    else begin
      m   = {32'd0, 1'b1, a[22:0]} << (e + 1);    // value * 2^24, one extra bit
      mag = 32'(m[55:24]) + 32'(m[23]);            // m[23] is the half bit
      if (mag > 32'(lim)) mag = 32'(lim);
    end
    return a[31] ? -$signed(mag) : $signed(mag);
  endfunction

  // Float to signed fixed point with fb fraction bits, truncating toward minus
  // infinity, saturating to a signed 32-bit range.
  function automatic logic signed [31:0] fp_to_fixed_floor(input fp32_t a, input int fb);
    int          e;
    logic [63:0] m;
    logic [63:0] r;
    logic        lost;
    if (fp_is_zero(a)) return 32'sd0;
    e = int'(a[30:23]) - 127 + fb;        // value*2^fb = 1.m * 2^e
    if (e >= 31) return a[31] ? 32'sh8000_0000 : 32'sh7fff_ffff;
    if (e < -1) return a[31] ? -32'sd1 : 32'sd0;
    m = {40'd0, 1'b1, a[22:0]};
    if (e >= 23) begin
      r = m << (e - 23);
      lost = 1'b0;
    end else begin
      r = m >> (23 - e);
      lost = (m & ((64'd1 << (23 - e)) - 64'd1)) != 64'd0;
    end
    if (!a[31]) return $signed(r[31:0]);
    return -$signed(r[31:0]) - (lost ? 32'sd1 : 32'sd0);
  endfunction

  // Elaboration / testbench helpers (double precision, not for hardware paths).
  function automatic fp32_t real_to_fp(input real r);
    logic [63:0] d;
    int          e;
    logic [52:0] m;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    return fp_pack(d[63], e, m[52:29], m[28], |m[27:0]);
  endfunction

  function automatic real fp_to_real(input fp32_t a);
    logic [63:0] d;
    if (fp_is_zero(a)) return 0.0;
    d = {a[31], 11'(int'(a[30:23]) - 127 + 1023), a[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // exp() of a double by argument halving and a Taylor series, for constants.
  function automatic real real_exp(input real x);
    real y, t, s;
    int  k;
    k = 0;
    y = x;
    while (y > 0.5 || y < -0.5) begin
      y = y / 2.0;
      k++;
    end
    s = 1.0;
    t = 1.0;
    for (int i = 1; i < 20; i++) begin
      t = t * y / i;
      s = s + t;
    end
    for (int i = 0; i < k; i++) s = s * s;
    return s;
  endfunction

endpackage
