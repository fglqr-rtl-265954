// tb_fp32_pkg: checks the binary32 operators of fp32_pkg against double
// precision arithmetic on random and corner-case operands. Add, multiply,
// divide and square root must be correctly rounded (the result must equal
// the double result rounded to binary32); scale-by-2^k must be exact.
module tb_fp32_pkg;
  import fp32_pkg::*;
  import tb_fp_util_pkg::*;

  int checks = 0, failures = 0;

  task automatic expect_eq(input string op, input fp32_t got, input fp32_t want);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h want %h", op, got, want);
    end
  endtask

  function automatic fp32_t rnd_fp(input int emin, input int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'(($urandom & 1)), 8'(e), 23'($urandom)};
  endfunction

  initial begin
    fp32_t a, b;
    for (int i = 0; i < 4000; i++) begin
      a = rnd_fp(100, 150);
      b = (i % 7 == 0) ? {~a[31], a[30:0] ^ 31'($urandom_range(3))} : rnd_fp(100, 150);
      expect_eq("add", fp_add(a, b), real2fp(fp2real(a) + fp2real(b)));
      expect_eq("sub", fp_sub(a, b), real2fp(fp2real(a) - fp2real(b)));
      expect_eq("mul", fp_mul(a, b), real2fp(fp2real(a) * fp2real(b)));
      expect_eq("div", fp_div(a, b), real2fp(fp2real(a) / fp2real(b)));
      expect_eq("sqrt", fp_sqrt(fp_abs(a)), real2fp($sqrt(fp2real(fp_abs(a)))));
      expect_eq("scale", fp_scale2(a, 5), real2fp(fp2real(a) * 32.0));
    end
    expect_eq("zero+zero", fp_add(FP_ZERO, FP_ZERO), FP_ZERO);
    expect_eq("x-x", fp_sub(FP_TWO, FP_TWO), FP_ZERO);
    expect_eq("0*x", fp_mul(FP_ZERO, FP_TWO), FP_ZERO);
    expect_eq("sqrt4", fp_sqrt(32'h40800000), FP_TWO);
    expect_eq("pow2", fp_pow2(10), real2fp(1024.0));
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
