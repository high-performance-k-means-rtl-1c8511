// tb_kmeans_pkg: checks the single-precision functions of kmeans_pkg bit for
// bit. Each operation is also computed in double precision and rounded to
// single precision; for addition, subtraction, multiplication and division of
// single-precision operands this double rounding gives the correctly rounded
// result, so the design's fp_add, fp_sub, fp_mul, fp_div and u32_to_fp must
// match exactly. Operands are random with exponents kept away from the
// subnormal and overflow ranges, plus cancellation and equal-exponent cases;
// fp_lt is checked against real comparison.
module tb_kmeans_pkg;
  import kmeans_pkg::*;
  import tb_fp_pkg::*;
  int checks = 0, failures = 0;

  function automatic logic [31:0] rnd_fp();
    logic [7:0] e;
    e = 8'($urandom_range(127 - 40, 127 + 40));
    return {1'($urandom), e, 23'($urandom)};
  endfunction

  task automatic cmp(input logic [31:0] got, input logic [31:0] expv, input string what);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 20) $display("FAIL: %s got %h expected %h", what, got, expv);
    end
  endtask

  initial begin
    logic [31:0] a, b, u;
    for (int n = 0; n < 20000; n++) begin
      a = rnd_fp();
      b = rnd_fp();
      if (n % 4 == 1) b = {~a[31], a[30:23], 23'($urandom)};       // cancellation
      if (n % 4 == 2) b = {b[31], a[30:23], b[22:0]};              // equal exponents
      cmp(fp_add(a, b), to_fp32(from_fp32(a) + from_fp32(b)), $sformatf("add %h %h", a, b));
      cmp(fp_sub(a, b), to_fp32(from_fp32(a) - from_fp32(b)), $sformatf("sub %h %h", a, b));
      cmp(fp_mul(a, b), to_fp32(from_fp32(a) * from_fp32(b)), $sformatf("mul %h %h", a, b));
      cmp(fp_div(a, b), to_fp32(from_fp32(a) / from_fp32(b)), $sformatf("div %h %h", a, b));
      checks++;
      if (fp_lt(a, b) != (from_fp32(a) < from_fp32(b))) begin
        failures++;
        $display("FAIL: lt %h %h", a, b);
      end
      u = (n % 2 == 0) ? $urandom : 32'($urandom_range(0, 100000));
      cmp(u32_to_fp(u), to_fp32(real'(u)), $sformatf("u32 %0d", u));
    end
    cmp(fp_add(32'h3F80_0000, 32'h0000_0000), 32'h3F80_0000, "1 + 0");
    cmp(fp_add(32'h3F80_0000, 32'hBF80_0000), 32'h0000_0000, "1 - 1");
    cmp(fp_mul(32'h4040_0000, 32'h0000_0000), 32'h0000_0000, "3 * 0");
    cmp(u32_to_fp(32'd0), 32'h0000_0000, "u32 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
