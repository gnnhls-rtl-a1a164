// gnn_pkg: shared types, constants and IEEE-754 single-precision arithmetic
// for the GNN inference kernels.
//
// All kernels compute in 32-bit floating point, as the accelerator they model
// does. The operators here are combinational functions, so a kernel that calls
// one gets a full adder, multiplier or divider in that cycle; no operator is
// pipelined. They flush subnormals to zero, do not produce NaN, saturate to
// infinity on overflow and round to nearest (ties away from zero).
//
// Transcendental functions are built from these operators:
//   exp(x)     = 2^n * 2^f with x*log2(e) = n + f, 0 <= f < 1, and 2^f from a
//                degree-5 least-squares polynomial (relative error about 1e-7),
//   sigmoid(x) = 1 / (1 + exp(-x)),
//   tanh(x)    = 2 * sigmoid(2x) - 1,
//   elu(x)     = x for x > 0, exp(x) - 1 otherwise,
//   lrelu(x)   = x for x > 0, 0.2 x otherwise (slope 0.2 is this design's
//                choice; the source paper does not state it).
package gnn_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO  = 32'h0000_0000;
  localparam fp32_t FP_ONE   = 32'h3f80_0000;
  localparam fp32_t FP_TWO   = 32'h4000_0000;
  localparam fp32_t FP_MHALF = 32'hbf00_0000;  // -0.5
  localparam fp32_t FP_LOG2E = 32'h3fb8_aa3b;  // log2(e)
  localparam fp32_t FP_LRELU = 32'h3e4c_cccd;  // 0.2, LeakyReLU slope
  localparam fp32_t FP_EPS   = 32'h3586_37bd;  // 1e-6, GatedGCN stabiliser

  // 2^f = 1 + f*(C1 + f*(C2 + f*(C3 + f*(C4 + f*C5)))) on 0 <= f < 1
  localparam fp32_t EXP2_C1 = 32'h3f31_725e;
  localparam fp32_t EXP2_C2 = 32'h3e75_ed97;
  localparam fp32_t EXP2_C3 = 32'h3d64_8f0e;
  localparam fp32_t EXP2_C4 = 32'h3c13_ba7c;
  localparam fp32_t EXP2_C5 = 32'h3af4_bd2e;

  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic logic fp_is_pos(input fp32_t a);
    return !a[31] && (a[30:23] != 8'd0);
  endfunction

  function automatic fp32_t fp_relu(input fp32_t a);
    return fp_is_pos(a) ? a : FP_ZERO;
  endfunction

  // pack sign, biased exponent (may be out of range) and 24-bit mantissa
  // with its hidden bit, rounding bit given separately
  function automatic fp32_t fp_pack(input logic s, input int e, input logic [23:0] m,
                                    input logic rnd);
    logic [24:0] mr;
    int          ee;
    mr = {1'b0, m} + 25'(rnd);
    ee = e;
    if (mr[24]) begin
      mr = mr >> 1;
      ee = ee + 1;
    end
    if (ee <= 0) return FP_ZERO;
    if (ee >= 255) return {s, 8'hff, 23'd0};
    return {s, 8'(ee), mr[22:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic [47:0] p;
    int          e;
    logic        s;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return FP_ZERO;
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return fp_pack(s, e + 1, p[47:24], p[23]);
    return fp_pack(s, e, p[46:23], p[22]);
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [27:0] mx, my, sum;
    int          d, e, lz;
    logic        sticky;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? FP_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin
      x = a; y = b;
    end else begin
      x = b; y = a;
    end
    // 1 carry bit, hidden bit, 23 fraction bits, 3 guard bits
    mx = {2'b01, x[22:0], 3'b000};
    my = {2'b01, y[22:0], 3'b000};
    d  = int'(x[30:23]) - int'(y[30:23]);
    e  = int'(x[30:23]);
    if (d > 27) my = 28'd1;
    else if (d > 0) begin
      sticky = |(my & ((28'd1 << d) - 28'd1));
      my = (my >> d) | 28'(sticky);
    end
    if (x[31] == y[31]) sum = mx + my;
    else sum = mx - my;
    if (sum == 28'd0) return FP_ZERO;
    if (sum[27]) begin
      sum = (sum >> 1) | 28'(sum[0]);
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
    // sum[26] is the hidden bit now
    return fp_pack(x[31], e, sum[26:3], sum[2]);
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  function automatic fp32_t fp_div(input fp32_t a, input fp32_t b);
    logic [49:0] q;
    int          e;
    logic        s;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0) return FP_ZERO;
    if (b[30:23] == 8'd0) return {s, 8'hff, 23'd0};
    // ({1,fa} << 25) / {1,fb} lies in (2^24, 2^26)
    q = {1'b0, 1'b1, a[22:0], 25'd0} / {26'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[25]) return fp_pack(s, e, q[25:2], q[1]);
    return fp_pack(s, e - 1, q[24:1], q[0]);
  endfunction

  function automatic fp32_t fp_from_uint(input logic [31:0] v);
    int          lz;
    logic [31:0] n;
    if (v == 32'd0) return FP_ZERO;
    lz = 0;
    for (int i = 31; i >= 0; i--) begin
      if (v[i]) break;
      lz++;
    end
    n = v << lz;  // n[31] is the leading one
    return fp_pack(1'b0, 127 + 31 - lz, n[31:8], n[7]);
  endfunction

  function automatic fp32_t fp_from_int(input int v);
    fp32_t r;
    if (v < 0) begin
      r = fp_from_uint(32'(-v));
      return fp_neg(r);
    end
    return fp_from_uint(32'(v));
  endfunction

  // floor() of a value whose magnitude is below 2^8
  function automatic int fp_floor_small(input fp32_t a);
    int          sh;
    logic [31:0] m, mag;
    logic        frac;
    if (a[30:23] < 8'd127) return (a[31] && a[30:23] != 8'd0) ? -1 : 0;
    sh   = int'(a[30:23]) - 127;
    m    = {8'd0, 1'b1, a[22:0]};
    mag  = m >> (23 - sh);
    frac = |(m & ((32'd1 << (23 - sh)) - 32'd1));
    if (a[31]) return frac ? -int'(mag) - 1 : -int'(mag);
    return int'(mag);
  endfunction

  function automatic fp32_t fp_exp(input fp32_t x);
    fp32_t y, f, p;
    int    n, e;
    y = fp_mul(x, FP_LOG2E);
    // |y| >= 128: underflow to 0 or saturate to infinity
    if (y[30:23] >= 8'd134) return y[31] ? FP_ZERO : 32'h7f80_0000;
    n = fp_floor_small(y);
    f = fp_sub(y, fp_from_int(n));
    p = fp_add(EXP2_C4, fp_mul(f, EXP2_C5));
    p = fp_add(EXP2_C3, fp_mul(f, p));
    p = fp_add(EXP2_C2, fp_mul(f, p));
    p = fp_add(EXP2_C1, fp_mul(f, p));
    p = fp_add(FP_ONE, fp_mul(f, p));
    e = int'(p[30:23]) + n;
    if (e <= 0) return FP_ZERO;
    if (e >= 255) return 32'h7f80_0000;
    return {1'b0, 8'(e), p[22:0]};
  endfunction

  function automatic fp32_t fp_sigmoid(input fp32_t x);
    return fp_div(FP_ONE, fp_add(FP_ONE, fp_exp(fp_neg(x))));
  endfunction

  function automatic fp32_t fp_tanh(input fp32_t x);
    return fp_sub(fp_mul(FP_TWO, fp_sigmoid(fp_mul(FP_TWO, x))), FP_ONE);
  endfunction

  function automatic fp32_t fp_elu(input fp32_t x);
    return fp_is_pos(x) ? x : fp_sub(fp_exp(x), FP_ONE);
  endfunction

  function automatic fp32_t fp_lrelu(input fp32_t x);
    return fp_is_pos(x) ? x : fp_mul(x, FP_LRELU);
  endfunction

endpackage
