// tb_grad_lane_pair: random (pixel, Gaussian, training pixel state) tasks,
// one per cycle, through a training lane pair. The returned gradients and
// pixel state are compared, five cycles later, with a double-precision model
// of the reference backward step:
//   T_i = T / (1-a), dL/dc = T_i a G, dL/da = T_i (c - C_acc).G
//   - T_f/(1-a) bg.G, C_acc' = a c + (1-a) C_acc.
// The model's 1/(1-a) is the 4th-order Taylor polynomial below 0.5 and exact
// above (the design's Newton-Raphson result is within 1e-5 there).
module tb_grad_lane_pair;
  import vorion_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, out_valid;
  logic [15:0] px, py;
  gauss_t      g;
  tpix_t       pin, pout;
  f32_t [2:0]  bg, dl_dc;
  f32_t        dl_da;
  grad_lane_pair dut (.clk, .rst_n, .in_valid, .px, .py, .g, .pix_in(pin), .bg,
                      .out_valid, .pix_out(pout), .dl_dc, .dl_da);

  typedef struct { bit v; bit amb; bit skip; real t; real acc[3]; real dc[3]; real da; real scale; } exp_t;
  exp_t q[$];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_active = 0;
    in_valid = 0; px = 0; py = 0; g = '0; pin = '0; bg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3005; i++) begin
      exp_t e;
      @(negedge clk);
      if (q.size() == 5) begin
        e = q.pop_front();
        checks++;
        if (out_valid !== e.v) begin failures++; $display("FAIL latency"); end
        if (e.v && !e.amb) begin
          checks++;
          if (!close(f2r(pout.t), e.t, 1e-4, 1e-7)) begin failures++; $display("FAIL T %g %g", f2r(pout.t), e.t); end
          if (!close(f2r(dl_da), e.da, 1e-4, 1e-5 * e.scale)) begin failures++; $display("FAIL dLda %g %g", f2r(dl_da), e.da); end
          for (int ch = 0; ch < 3; ch++) begin
            if (!close(f2r(pout.acc[ch]), e.acc[ch], 1e-5, 1e-7)) begin failures++; $display("FAIL acc"); end
            if (!close(f2r(dl_dc[ch]), e.dc[ch], 1e-4, 1e-8)) begin failures++; $display("FAIL dLdc %g %g", f2r(dl_dc[ch]), e.dc[ch]); end
          end
        end
      end
      if (i < 3000) begin
        real a, t, ti, rc, gg[3], acc[3], tf, bgv[3], dot, bgdot;
        bit  skip;
        in_valid = ($urandom_range(0, 9) != 0);
        px = 16'($urandom_range(0, 63));
        py = 16'($urandom_range(0, 31));
        g  = rand_gauss(int'(px), int'(py), 5, i);
        pin.t  = r2f(real'($urandom_range(1, 1000)) / 1000.0);
        pin.tf = r2f(real'($urandom_range(1, 1000)) / 10000.0);
        for (int ch = 0; ch < 3; ch++) begin
          pin.g[ch]   = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 1000.0);
          pin.acc[ch] = r2f(real'($urandom_range(0, 1000)) / 1000.0);
          bg[ch]      = r2f(real'($urandom_range(0, 1000)) / 1000.0);
        end
        a = ref_alpha(g, int'(px), int'(py), skip);
        e.amb = rabs(a - 1.0 / 255.0) < 0.01 / 255.0;
        t = f2r(pin.t); tf = f2r(pin.tf);
        for (int ch = 0; ch < 3; ch++) begin gg[ch] = f2r(pin.g[ch]); acc[ch] = f2r(pin.acc[ch]); bgv[ch] = f2r(bg[ch]); end
        rc = (a < 0.5) ? (1.0 + a + a*a + a*a*a + a*a*a*a) : 1.0 / (1.0 - a);
        e.v = in_valid; e.skip = skip;
        if (skip) begin
          e.t = t; e.acc = acc; e.dc = '{0.0, 0.0, 0.0}; e.da = 0.0; e.scale = 1.0;
        end else begin
          n_active++;
          ti = t * rc;
          dot = 0.0; bgdot = 0.0;
          for (int ch = 0; ch < 3; ch++) begin
            dot   += (f2r(g.color[ch]) - acc[ch]) * gg[ch];
            bgdot += bgv[ch] * gg[ch];
            e.dc[ch]  = ti * a * gg[ch];
            e.acc[ch] = a * f2r(g.color[ch]) + (1.0 - a) * acc[ch];
          end
          e.t = ti;
          e.da = ti * dot - tf * rc * bgdot;
          e.scale = ti * 3.0 + tf * rc * 3.0;
        end
      end else begin
        in_valid = 0; e.v = 0; e.amb = 1;
      end
      q.push_back(e);
    end
    checks++;
    if (n_active < 100) begin failures++; $display("FAIL coverage %0d", n_active); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
