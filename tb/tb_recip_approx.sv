// tb_recip_approx: sweeps alpha over [0, 0.99] (and beyond, where the input is
// limited to 0.99) and checks 1/(1-alpha) against the exact value within the
// 3% bound of the design; also checks that the Newton-Raphson branch is far
// tighter (0.1%) than that bound.
module tb_recip_approx;
  import vorion_pkg::*;
  import tb_pkg::*;
  int checks = 0, failures = 0;
  f32_t a, r;
  recip_approx dut (.alpha(a), .recip(r));

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real worst_t = 0.0, worst_n = 0.0;
    for (int i = 0; i <= 1000; i++) begin
      real av, ex, err;
      av = real'(i) / 1000.0 * 0.995;
      a  = r2f(av);
      #1;
      ex  = 1.0 / (1.0 - ((f2r(a) > 0.99) ? 0.99 : f2r(a)));
      err = rabs(f2r(r) - ex) / ex;
      checks++;
      if (err > 0.032) begin
        failures++;
        $display("FAIL alpha=%f got %f exp %f", av, f2r(r), ex);
      end
      if (av >= 0.5) begin
        checks++;
        if (err > 1e-3) begin failures++; $display("FAIL NR alpha=%f err %f", av, err); end
        if (err > worst_n) worst_n = err;
      end else if (err > worst_t) worst_t = err;
    end
    $display("worst Taylor %f, worst NR %f", worst_t, worst_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
