// tb_fp_pkg: conversions between real and IEEE-754 single precision for the
// testbenches, written independently of the design's arithmetic.
//
// to_fp32 rounds a real to the nearest single-precision value (ties to even,
// subnormals flushed to zero); from_fp32 gives the exact real of a
// single-precision word. Reference models compute in double precision (real)
// and compare against the design with a relative tolerance via close().
package tb_fp_pkg;

  function automatic logic [31:0] to_fp32(input real r);
    logic [63:0] b;
    logic [52:0] m;      // 1.52
    int          e;
    logic [23:0] mant;
    logic        g, s;
    logic [24:0] mr;
    if (r == 0.0) return 32'd0;
    b    = $realtobits(r);
    e    = int'(b[62:52]) - 1023 + 127;
    m    = {1'b1, b[51:0]};
    mant = m[52:29];
    g    = m[28];
    s    = |m[27:0];
    mr   = {1'b0, mant} + ((g && (s || mant[0])) ? 25'd1 : 25'd0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 1;
    end
    if (e <= 0) return {b[63], 31'd0};
    if (e >= 255) return {b[63], 8'hFF, 23'd0};
    return {b[63], e[7:0], mr[22:0]};
  endfunction

  function automatic real from_fp32(input logic [31:0] f);
    logic [63:0] b;
    int          e;
    if (f[30:23] == 8'd0) return 0.0;
    e = int'(f[30:23]) - 127 + 1023;
    b = {f[31], e[10:0], f[22:0], 29'd0};
    return $bitstoreal(b);
  endfunction

  function automatic real fabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // |a - b| <= rel * max(|a|, |b|) + abs_tol
  function automatic bit close(input real a, input real b, input real rel, input real abs_tol);
    real m;
    m = (fabs(a) > fabs(b)) ? fabs(a) : fabs(b);
    return fabs(a - b) <= rel * m + abs_tol;
  endfunction

endpackage
