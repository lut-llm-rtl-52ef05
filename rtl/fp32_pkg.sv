// fp32_pkg: single-precision floating-point helper functions shared by the
// centroid search, the dequantizer, the special-function units and the
// attention engine.
//
// All functions are combinational and synthesizable. They implement IEEE-754
// binary32 with two simplifications that are this design's own choice (the
// source architecture only states that centroids, attention and non-linear
// operations are FP32):
//   * subnormal inputs and results are flushed to zero;
//   * results are truncated (round toward zero) instead of round-to-nearest.
// NaN is not generated; overflow saturates to infinity.
// exp, reciprocal and reciprocal square root are approximations built from
// add/multiply: exp uses 2^n times a degree-6 polynomial in f, reciprocal and rsqrt use a bit-trick
// seed followed by three Newton-Raphson steps (relative error below 1e-4).
package fp32_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_INF  = 32'h7F80_0000;
  localparam fp32_t FP_NINF = 32'hFF80_0000;

  function automatic logic fp_is_zero(fp32_t a);
    return a[30:23] == 8'd0;
  endfunction

  function automatic fp32_t fp_neg(fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_abs(fp32_t a);
    return {1'b0, a[30:0]};
  endfunction

  // Maps a float to an unsigned key whose integer order is the float order
  // (zeros of either sign map to the same key).
  function automatic logic [31:0] fp_key(fp32_t a);
    if (fp_is_zero(a)) return 32'h8000_0000;
    return a[31] ? ~a : {1'b1, a[30:0]};
  endfunction

  function automatic logic fp_lt(fp32_t a, fp32_t b);
    return fp_key(a) < fp_key(b);
  endfunction

  function automatic fp32_t fp_max(fp32_t a, fp32_t b);
    return fp_lt(a, b) ? b : a;
  endfunction

  function automatic fp32_t fp_add(fp32_t a, fp32_t b);
    logic              sa, sb, sr;
    logic [7:0]        ea, eb, d;
    logic [26:0]       ma, mb;   // {1, frac, 3 guard bits}
    logic [27:0]       sum;
    logic [4:0]        lz;
    logic signed [9:0] er;
    fp32_t             t;
    if (fp_is_zero(a)) return fp_is_zero(b) ? FP_ZERO : b;
    if (fp_is_zero(b)) return a;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    // order operands so that |a| >= |b|
    if (a[30:0] < b[30:0]) begin
      t = a; a = b; b = t;
    end
    sa = a[31]; sb = b[31];
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0], 3'b000};
    mb = {1'b1, b[22:0], 3'b000};
    d  = ea - eb;
    if (d > 8'd26) mb = '0;
    else           mb = mb >> d[4:0];
    er = signed'({2'b00, ea});
    sr = sa;
    if (sa == sb) begin
      sum = {1'b0, ma} + {1'b0, mb};
      if (sum[27]) begin
        sum = sum >> 1;
        er  = er + 10'sd1;
      end
    end else begin
      sum = {1'b0, ma} - {1'b0, mb};
      if (sum == '0) return FP_ZERO;
      // normalise: staged left shifts until bit 26 is set
      lz = 5'd0;
      if (sum[26:11] == '0) begin sum = sum << 16; lz = lz + 5'd16; end
      if (sum[26:19] == '0) begin sum = sum << 8;  lz = lz + 5'd8;  end
      if (sum[26:23] == '0) begin sum = sum << 4;  lz = lz + 5'd4;  end
      if (sum[26:25] == '0) begin sum = sum << 2;  lz = lz + 5'd2;  end
      if (sum[26]    == 1'b0) begin sum = sum << 1; lz = lz + 5'd1; end
      er  = er - signed'({5'd0, lz});
    end
    if (er >= 10'sd255) return sr ? FP_NINF : FP_INF;
    if (er <= 10'sd0)   return FP_ZERO;
    return {sr, er[7:0], sum[25:3]};
  endfunction

  function automatic fp32_t fp_sub(fp32_t a, fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp32_t fp_mul(fp32_t a, fp32_t b);
    logic              sr;
    logic [47:0]       p;
    logic [22:0]       m;
    logic signed [9:0] er;
    sr = a[31] ^ b[31];
    if (fp_is_zero(a) || fp_is_zero(b)) return FP_ZERO;
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {sr, FP_INF[30:0]};
    p  = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    er = signed'({2'b00, a[30:23]}) + signed'({2'b00, b[30:23]}) - 10'sd127;
    if (p[47]) begin
      m  = p[46:24];
      er = er + 10'sd1;
    end else begin
      m  = p[45:23];
    end
    if (er >= 10'sd255) return {sr, FP_INF[30:0]};
    if (er <= 10'sd0)   return {sr, 31'd0};
    return {sr, er[7:0], m};
  endfunction

  // Signed 32-bit integer to float (truncating).
  function automatic fp32_t fp_from_int(logic signed [31:0] v);
    logic        s;
    logic [31:0] m;
    logic [4:0]  k;
    if (v == 0) return FP_ZERO;
    s = v[31];
    m = s ? 32'(-v) : 32'(v);   // -2^31 maps to 2^31, still exact
    // normalise: staged left shifts until bit 31 is set; k = 31 - shift
    k = 5'd31;
    if (m[31:16] == '0) begin m = m << 16; k = k - 5'd16; end
    if (m[31:24] == '0) begin m = m << 8;  k = k - 5'd8;  end
    if (m[31:28] == '0) begin m = m << 4;  k = k - 5'd4;  end
    if (m[31:30] == '0) begin m = m << 2;  k = k - 5'd2;  end
    if (m[31]    == 1'b0) begin m = m << 1; k = k - 5'd1; end
    return {s, 8'd127 + {3'd0, k}, m[30:8]};
  endfunction

  // Float to integer, rounding toward minus infinity, clamped to +-2^30.
  function automatic int fp_floor_int(fp32_t a);
    logic signed [8:0] e;
    logic [54:0]       m;
    int                r;
    logic              frac_nz;
    if (fp_is_zero(a)) return 0;
    e = signed'({1'b0, a[30:23]}) - 9'sd127;
    if (e > 9'sd29) return a[31] ? -(1 << 30) : (1 << 30);
    if (e < 9'sd0)  return a[31] ? -1 : 0;
    m = {31'd0, 1'b1, a[22:0]} << e[4:0];   // value * 2^23
    r = int'(m[53:23]);
    frac_nz = (m[22:0] != '0);
    if (a[31]) r = frac_nz ? -r - 1 : -r;
    return r;
  endfunction

  // exp(x) = 2^n * 2^f with n = floor(x*log2 e), f in [0,1).
  function automatic fp32_t fp_exp(fp32_t x);
    fp32_t y, f, p;
    int                n;
    logic signed [9:0] e;
    if (fp_lt(x, 32'hC2AE_0000)) return FP_ZERO;   // x < -87
    if (fp_lt(32'h42B0_0000, x)) return FP_INF;    // x > 88
    y = fp_mul(x, 32'h3FB8_AA3B);                  // log2(e)
    n = fp_floor_int(y);
    f = fp_sub(y, fp_from_int(32'(n)));
    // 2^f ~ sum_k (f ln2)^k / k!, k = 0..6 (Horner form)
    p = fp_add(32'h3AAE_C3FF, fp_mul(f, 32'h3921_8489));
    p = fp_add(32'h3C1D_955B, fp_mul(f, p));
    p = fp_add(32'h3D63_5847, fp_mul(f, p));
    p = fp_add(32'h3E75_FDF0, fp_mul(f, p));
    p = fp_add(32'h3F31_7218, fp_mul(f, p));
    p = fp_add(FP_ONE, fp_mul(f, p));
    if (n < -200) return FP_ZERO;
    if (n > 200)  return FP_INF;
    e = signed'({2'b00, p[30:23]}) + 10'(n);
    if (e <= 10'sd0)   return FP_ZERO;
    if (e >= 10'sd255) return FP_INF;
    return {1'b0, e[7:0], p[22:0]};
  endfunction

  // 1/x for finite non-zero x.
  function automatic fp32_t fp_recip(fp32_t x);
    fp32_t r, ax;
    ax = fp_abs(x);
    if (fp_is_zero(ax)) return FP_INF;
    r = 32'h7EF3_11C3 - ax;
    r = fp_mul(r, fp_sub(32'h4000_0000, fp_mul(ax, r)));
    r = fp_mul(r, fp_sub(32'h4000_0000, fp_mul(ax, r)));
    r = fp_mul(r, fp_sub(32'h4000_0000, fp_mul(ax, r)));
    return {x[31], r[30:0]};
  endfunction

  // 1/sqrt(x) for x > 0.
  function automatic fp32_t fp_rsqrt(fp32_t x);
    fp32_t r, hx;
    if (fp_is_zero(x) || x[31]) return FP_INF;
    r  = 32'h5F37_59DF - (x >> 1);
    hx = fp_mul(x, 32'h3F00_0000);
    r = fp_mul(r, fp_sub(32'h3FC0_0000, fp_mul(hx, fp_mul(r, r))));
    r = fp_mul(r, fp_sub(32'h3FC0_0000, fp_mul(hx, fp_mul(r, r))));
    r = fp_mul(r, fp_sub(32'h3FC0_0000, fp_mul(hx, fp_mul(r, r))));
    return r;
  endfunction

endpackage
