// kmeans_pkg: types and IEEE-754 single-precision arithmetic shared by the
// k-means accelerator.
//
// The accelerator computes in 32-bit single-precision floating point, as the
// design requires. The functions below are combinational and synthesizable:
// fp_add, fp_sub, fp_mul, fp_div and u32_to_fp round to nearest, ties to even.
// This design's own simplifications: subnormal inputs and results are flushed
// to signed zero, an exponent overflow returns infinity, and NaN inputs are not
// treated specially (the k-means datapath never produces them from finite
// data). fp_lt is an ordered less-than on finite numbers.
package kmeans_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;

  // Memory word size in bytes; every sample dimension, label, count and sum
  // is one 32-bit word.
  localparam int unsigned WORD_BYTES = 4;

  // Largest transfer one simple-mode DMA command may carry (8 MB).
  localparam int unsigned SIMPLE_DMA_MAX_BYTES = 32'd8 * 1024 * 1024;

  // Round a normalised mantissa (hidden bit at bit 23) with guard and sticky
  // bits; exp is the biased exponent, possibly out of range.
  function automatic fp32_t fp_pack(input logic sign, input int exp,
                                    input logic [23:0] mant, input logic guard,
                                    input logic sticky);
    logic [24:0] m;
    int          e;
    m = {1'b0, mant};
    e = exp;
    if (guard && (sticky || mant[0])) m = m + 25'd1;
    if (m[24]) begin
      m = m >> 1;
      e = e + 1;
    end
    if (e <= 0) return {sign, 31'd0};
    if (e >= 255) return {sign, 8'hFF, 23'd0};
    return {sign, e[7:0], m[22:0]};
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    logic        sa, sb, s;
    int          ea, eb, e, diff;
    logic [26:0] ma, mb;   // 1.23 mantissa followed by guard, round, sticky
    logic [27:0] sum;
    logic        stk;
    fp32_t       t;
    int          lz;
    // Order so that |a| >= |b|.
    if (a[30:0] < b[30:0]) begin
      t = a;
      a = b;
      b = t;
    end
    sa = a[31];
    sb = b[31];
    ea = int'(a[30:23]);
    eb = int'(b[30:23]);
    if (ea == 0) return FP_ZERO;      // both operands are zero
    if (eb == 0) return a;            // b is zero
    ma = {1'b1, a[22:0], 3'b000};
    mb = {1'b1, b[22:0], 3'b000};
    diff = ea - eb;
    if (diff > 26) begin
      mb = 27'd1;                     // only the sticky bit survives
    end else if (diff > 0) begin
      stk = |(mb & ((27'd1 << diff) - 27'd1));
      mb = mb >> diff;
      mb[0] = mb[0] | stk;
    end
    e = ea;
    s = sa;
    if (sa == sb) begin
      sum = {1'b0, ma} + {1'b0, mb};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e = e + 1;
      end
    end else begin
      sum = {1'b0, ma} - {1'b0, mb};
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int i = 0; i <= 26; i++) if (sum[i]) lz = 26 - i;
      sum = sum << lz;
      e = e - lz;
    end
    return fp_pack(s, e, sum[26:3], sum[2], sum[1] | sum[0]);
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, {~b[31], b[30:0]});
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic [47:0] p;
    int          e;
    logic        s;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) return fp_pack(s, e + 1, p[47:24], p[23], |p[22:0]);
    return fp_pack(s, e, p[46:23], p[22], |p[21:0]);
  endfunction

  // a / b. Division by zero returns signed infinity.
  function automatic fp32_t fp_div(input fp32_t a, input fp32_t b);
    logic [49:0] num;
    logic [26:0] q;
    logic [23:0] mb;
    logic        inexact;
    int          e;
    logic        s;
    s = a[31] ^ b[31];
    if (b[30:23] == 8'd0) return {s, 8'hFF, 23'd0};
    if (a[30:23] == 8'd0) return {s, 31'd0};
    num = {1'b1, a[22:0], 26'd0};
    mb  = {1'b1, b[22:0]};
    q = 27'(num / {26'd0, mb});
    inexact = (50'(q) * {26'd0, mb}) != num;
    e = int'(a[30:23]) - int'(b[30:23]) + 127;
    // q lies in (2^25, 2^27).
    if (q[26]) return fp_pack(s, e, q[26:3], q[2], (|q[1:0]) | inexact);
    return fp_pack(s, e - 1, q[25:2], q[1], q[0] | inexact);
  endfunction

  function automatic fp32_t u32_to_fp(input logic [31:0] u);
    int          msb;
    logic [55:0] x;
    if (u == 32'd0) return FP_ZERO;
    msb = 0;
    for (int i = 0; i < 32; i++) if (u[i]) msb = i;
    // Place the leading one at bit 55, leaving 32 bits below the mantissa.
    x = {24'd0, u} << (55 - msb);
    return fp_pack(1'b0, 127 + msb, x[55:32], x[31], |x[30:0]);
  endfunction

  // a < b for finite values (zeros of either sign compare equal).
  function automatic logic fp_lt(input fp32_t a, input fp32_t b);
    if (a[30:0] == 31'd0 && b[30:0] == 31'd0) return 1'b0;
    if (a[31] != b[31]) return a[31];
    if (a[31]) return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic fp32_t fp_abs(input fp32_t a);
    return {1'b0, a[30:0]};
  endfunction

endpackage
