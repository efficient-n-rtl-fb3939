// sat_fp_pkg: floating-point arithmetic shared by the processing elements, the
// weight-update lanes and the output router.
//
// The accelerator computes with IEEE-754 half precision (FP16) operands and
// single precision (FP32) accumulation, as in mixed-precision training. The
// functions here are purely combinational; callers put pipeline registers
// around them. Supported: normal numbers, signed zero, infinity and NaN.
// Subnormal inputs are flushed to zero and results that would be subnormal are
// flushed to zero as well; every rounding is round-to-nearest-even. The use of
// FP16/FP32 follows the design; flush-to-zero is a choice of this
// implementation, which keeps the datapath small.
package sat_fp_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  localparam fp32_t FP32_ZERO = 32'h0000_0000;
  localparam fp32_t FP32_QNAN = 32'h7fc0_0000;
  localparam fp16_t FP16_QNAN = 16'h7e00;

  // half-to-float switcher: exact for every normal FP16 number.
  function automatic fp32_t fp16_to_fp32(fp16_t h);
    logic [4:0] e;
    e = h[14:10];
    if (e == 5'd0)       return {h[15], 31'd0};
    else if (e == 5'h1f) return {h[15], 8'hff, h[9:0], 13'd0};
    else                 return {h[15], 8'(e) + 8'd112, h[9:0], 13'd0};
  endfunction

  // float-to-half switcher with round-to-nearest-even.
  function automatic fp16_t fp32_to_fp16(fp32_t f);
    logic [7:0]  e;
    logic signed [9:0] e16;
    logic [10:0] m;   // one extra bit for the rounding carry
    logic g, st;
    e = f[30:23];
    if (e == 8'hff) return (f[22:0] != 0) ? FP16_QNAN : {f[31], 15'h7c00};
    if (e == 8'd0)  return {f[31], 15'd0};
    e16 = $signed({2'b00, e}) - 10'sd112;
    m   = {1'b0, f[22:13]};
    g   = f[12];
    st  = |f[11:0];
    if (g && (st || m[0])) m = m + 11'd1;
    if (m[10]) begin m = 11'd0; e16 = e16 + 10'sd1; end
    if (e16 >= 10'sd31) return {f[31], 15'h7c00};
    if (e16 <= 10'sd0)  return {f[31], 15'd0};
    return {f[31], e16[4:0], m[9:0]};
  endfunction

  // FP32 multiplier, round-to-nearest-even.
  function automatic fp32_t fp32_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [47:0] p;
    logic [24:0] m;
    logic        g, st;
    logic signed [10:0] e;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0)) return FP32_QNAN;
    if (ea == 8'hff || eb == 8'hff) begin
      if (ea == 8'd0 || eb == 8'd0) return FP32_QNAN;   // 0 * inf
      return {s, 8'hff, 23'd0};
    end
    if (ea == 8'd0 || eb == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 11'sd127;
    if (p[47]) begin
      m  = {1'b0, p[47:24]};
      g  = p[23];
      st = |p[22:0];
      e  = e + 11'sd1;
    end else begin
      m  = {1'b0, p[46:23]};
      g  = p[22];
      st = |p[21:0];
    end
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 11'sd1; end
    if (e >= 11'sd255) return {s, 8'hff, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], m[22:0]};
  endfunction

  // FP32 adder, round-to-nearest-even (guard, round and sticky bits).
  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    logic [7:0]  ex, ey, d;
    logic [26:0] mx, my, mys;
    logic [27:0] sum;
    logic [24:0] m;
    logic signed [10:0] e;
    logic        g, st, sx;
    ex = a[30:23];
    ey = b[30:23];
    if ((ex == 8'hff && a[22:0] != 0) || (ey == 8'hff && b[22:0] != 0)) return FP32_QNAN;
    if (ex == 8'hff && ey == 8'hff) return (a[31] != b[31]) ? FP32_QNAN : a;
    if (ex == 8'hff) return a;
    if (ey == 8'hff) return b;
    if (ex == 8'd0 && ey == 8'd0) return {a[31] & b[31], 31'd0};
    if (ex == 8'd0) return b;
    if (ey == 8'd0) return a;
    // order operands so that |x| >= |y|
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    ex = x[30:23];
    ey = y[30:23];
    sx = x[31];
    d  = ex - ey;
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    if (d >= 8'd27) mys = 27'd1;   // only the sticky bit survives
    else begin
      mys = my >> d;
      if ((my & ((27'd1 << d) - 27'd1)) != 27'd0) mys[0] = 1'b1;
    end
    if (x[31] == y[31]) sum = {1'b0, mx} + {1'b0, mys};
    else                sum = {1'b0, mx} - {1'b0, mys};
    if (sum == 28'd0) return FP32_ZERO;
    e = $signed({3'b000, ex});
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 11'sd1;
    end else begin
      for (int i = 0; i < 26; i++) begin
        if (!sum[26]) begin
          sum = sum << 1;
          e   = e - 11'sd1;
        end
      end
    end
    m  = {1'b0, sum[26:3]};
    g  = sum[2];
    st = sum[1] | sum[0];
    if (g && (st || m[0])) m = m + 25'd1;
    if (m[24]) begin m = m >> 1; e = e + 11'sd1; end
    if (e >= 11'sd255) return {sx, 8'hff, 23'd0};
    if (e <= 11'sd0)   return {sx, 31'd0};
    return {sx, e[7:0], m[22:0]};
  endfunction

  // FP16 multiplier: the 11x11-bit significand product is exact in FP32, so one
  // rounding to FP16 gives the correctly rounded half-precision product.
  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    return fp32_to_fp16(fp32_mul(fp16_to_fp32(a), fp16_to_fp32(b)));
  endfunction

  // magnitude compare of two FP16 numbers (non-NaN): |a| > |b|
  function automatic logic fp16_mag_gt(fp16_t a, fp16_t b);
    return a[14:0] > b[14:0];
  endfunction

endpackage
