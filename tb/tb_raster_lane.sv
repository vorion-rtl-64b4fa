// tb_raster_lane: drives one rendering lane with a random (pixel, Gaussian,
// pixel state) task every cycle and compares the state returned three cycles
// later with the double-precision 3DGS reference (alpha, clamp, skip, blend,
// collapse). Tasks whose reference lies within 1% of the 1/255 or 1e-4
// thresholds are not compared. Also checks the 3-cycle latency.
module tb_raster_lane;
  import vorion_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, out_valid, collapsed;
  logic [15:0] px, py;
  gauss_t      g;
  rpix_t       pin, pout;
  raster_lane dut (.clk, .rst_n, .in_valid, .px, .py, .g, .pix_in(pin),
                   .out_valid, .pix_out(pout), .collapsed);

  typedef struct { bit v; bit amb; real t; real c[3]; bit done; } exp_t;
  exp_t q[$];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_coll = 0, n_skip = 0;
    in_valid = 0; px = 0; py = 0; g = '0; pin = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4003; i++) begin
      exp_t e;
      @(negedge clk);
      // check the task issued three cycles ago
      if (q.size() == 3) begin
        e = q.pop_front();
        checks++;
        if (out_valid !== e.v) begin failures++; $display("FAIL latency"); end
        if (e.v && !e.amb) begin
          checks++;
          if (e.done) begin
            if (!pout.t[31] || !collapsed) begin failures++; $display("FAIL collapse"); end
          end else begin
            if (pout.t[31] || !close(f2r(pout.t), e.t, 2e-5, 1e-6)) begin
              failures++; $display("FAIL T %g exp %g", f2r(pout.t), e.t);
            end
            for (int ch = 0; ch < 3; ch++)
              if (!close(f2r(pout.c[ch]), e.c[ch], 2e-5, 1e-6)) begin
                failures++; $display("FAIL C%0d %g exp %g", ch, f2r(pout.c[ch]), e.c[ch]);
              end
          end
        end
      end
      if (i < 4000) begin
        real a, t, c[3], tt;
        bit  skip, done;
        in_valid = ($urandom_range(0, 9) != 0);
        px = 16'($urandom_range(100, 163));
        py = 16'($urandom_range(200, 263));
        g  = rand_gauss(int'(px), int'(py), 6, i);
        t  = (i % 7 == 0) ? real'($urandom_range(1, 30)) / 100000.0 : real'($urandom_range(10, 1000)) / 1000.0;
        for (int ch = 0; ch < 3; ch++) c[ch] = real'($urandom_range(0, 1000)) / 1000.0;
        pin.t = r2f(t);
        for (int ch = 0; ch < 3; ch++) pin.c[ch] = r2f(c[ch]);
        t = f2r(pin.t);
        for (int ch = 0; ch < 3; ch++) c[ch] = f2r(pin.c[ch]);
        a = ref_alpha(g, int'(px), int'(py), skip);
        tt = t * (1.0 - a);
        e.amb = (rabs(a - 1.0 / 255.0) < 0.01 / 255.0) || (!skip && rabs(tt - 1e-4) < 1e-6);
        done = 0;
        ref_blend(t, c, done, a, skip, g);
        if (done) n_coll++;
        if (skip) n_skip++;
        e.v = in_valid; e.t = t; e.c = c; e.done = done;
      end else begin
        in_valid = 0;
        e.v = 0; e.amb = 1;
      end
      q.push_back(e);
    end
    checks++;
    if (n_coll == 0 || n_skip == 0) begin failures++; $display("FAIL coverage"); end
    $display("collapsed=%0d skipped=%0d", n_coll, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
