// tb_fp32_ops: checks the FP32 functions of vorion_pkg (fmul, fadd, fsub,
// fexp, flt, u2f) against double-precision arithmetic on random operands,
// with the tolerance that truncating arithmetic allows (a few ulp; 2e-6
// relative for exp).
module tb_fp32_ops;
  import vorion_pkg::*;
  import tb_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(input string what, input real got, input real exp, input real rel);
    checks++;
    if (!close(got, exp, rel, 1e-30)) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %g exp %g", what, got, exp);
    end
  endtask

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, b;
    for (int i = 0; i < 3000; i++) begin
      a = (real'($urandom_range(1, 1000000)) / 1000.0) * ((i % 3 == 0) ? -1.0 : 1.0);
      b = (real'($urandom_range(1, 1000000)) / 37.0) * ((i % 2 == 0) ? -1.0 : 1.0);
      if (i % 5 == 0) b = a * 0.999;   // cancellation
      chk("mul", f2r(fmul(r2f(a), r2f(b))), f2r(r2f(a)) * f2r(r2f(b)), 3e-7);
      chk("add", f2r(fadd(r2f(a), r2f(b))), f2r(r2f(a)) + f2r(r2f(b)),
          3e-7 * (rabs(a) + rabs(b)) / (rabs(a + b) + 1e-30));
      chk("sub", f2r(fsub(r2f(a), r2f(b))), f2r(r2f(a)) - f2r(r2f(b)),
          3e-7 * (rabs(a) + rabs(b)) / (rabs(a - b) + 1e-30));
      a = -real'($urandom_range(0, 2000000)) / 100000.0;   // [-20, 0]
      chk("exp", f2r(fexp(r2f(a))), $exp(f2r(r2f(a))), 2e-6);
      checks++;
      if (flt(r2f(a), r2f(b)) != (f2r(r2f(a)) < f2r(r2f(b)))) failures++;
    end
    for (int v = 0; v < 65536; v += 97) chk("u2f", f2r(u2f(16'(v))), real'(v), 0.0);
    chk("exp0", f2r(fexp(F_ZERO)), 1.0, 0.0);
    chk("exp-100", f2r(fexp(r2f(-100.0))), 0.0, 0.0);
    chk("mul0", f2r(fmul(F_ZERO, r2f(3.0))), 0.0, 0.0);
    chk("add-x", f2r(fadd(r2f(2.5), r2f(-2.5))), 0.0, 0.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
