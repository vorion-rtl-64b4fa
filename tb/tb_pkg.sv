// tb_pkg: reference models shared by the testbenches. Everything here works
// in double-precision `real`, independently of the FP32 functions of the
// design: conversion between FP32 bit patterns and real, the 3DGS alpha,
// front-to-back blending and the reference backward pass of one pixel, and a
// small random Gaussian generator.
package tb_pkg;
  import vorion_pkg::*;

  function automatic real f2r(input logic [31:0] b);
    real m;
    int  e;
    if (b[30:23] == 8'd0) return 0.0;
    m = 1.0 + real'(b[22:0]) / 8388608.0;
    e = int'(b[30:23]) - 127;
    m = m * (2.0 ** e);
    return b[31] ? -m : m;
  endfunction

  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    int          e;
    d = $realtobits(r);
    if (r == 0.0) return 32'd0;
    e = int'(d[62:52]) - 1023 + 127;
    if (e <= 0) return {d[63], 31'd0};
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), d[51:29]};
  endfunction

  function automatic real rabs(input real r);
    return (r < 0.0) ? -r : r;
  endfunction

  function automatic bit close(input real got, input real exp, input real rel, input real abs_tol);
    return rabs(got - exp) <= abs_tol + rel * rabs(exp);
  endfunction

  // reference alpha; skip returned as a flag
  function automatic real ref_alpha(input gauss_t g, input int px, input int py, output bit skip);
    real dx, dy, power, a;
    dx = f2r(g.mu_x) - real'(px);
    dy = f2r(g.mu_y) - real'(py);
    power = -0.5 * (f2r(g.con_x) * dx * dx + f2r(g.con_y) * dy * dy) - f2r(g.con_z) * dx * dy;
    a = f2r(g.opacity) * $exp(power);
    if (a > 0.99) a = 0.99;
    skip = (power > 0.0) || (a < 1.0 / 255.0);
    return a;
  endfunction

  // reference front-to-back blend of one Gaussian into (t, c). done marks a
  // collapsed pixel.
  function automatic void ref_blend(inout real t, inout real c[3], inout bit done,
                                    input real a, input bit skip, input gauss_t g);
    real tt;
    if (done || skip) return;
    tt = t * (1.0 - a);
    if (tt < 1.0e-4) begin
      done = 1'b1;
      return;
    end
    for (int ch = 0; ch < 3; ch++) c[ch] += t * a * f2r(g.color[ch]);
    t = tt;
  endfunction

  // random Gaussian centred in [cx-r, cx+r] x [cy-r, cy+r]
  function automatic gauss_t rand_gauss(input int cx, input int cy, input int r, input int id);
    gauss_t g;
    real sx, sy, mx, my;
    int  hw;
    mx = real'(cx) + real'($urandom_range(0, 2 * r)) - real'(r) + real'($urandom_range(0, 99)) / 100.0;
    my = real'(cy) + real'($urandom_range(0, 2 * r)) - real'(r) + real'($urandom_range(0, 99)) / 100.0;
    sx = 1.0 + real'($urandom_range(0, 40)) / 10.0;   // std dev in pixels
    sy = 1.0 + real'($urandom_range(0, 40)) / 10.0;
    g.mu_x    = r2f(mx);
    g.mu_y    = r2f(my);
    g.con_x   = r2f(1.0 / (sx * sx));
    g.con_y   = r2f(1.0 / (sy * sy));
    g.con_z   = r2f((real'($urandom_range(0, 20)) - 10.0) / 100.0 / (sx * sy));
    g.opacity = r2f(0.05 + real'($urandom_range(0, 94)) / 100.0);
    for (int ch = 0; ch < 3; ch++) g.color[ch] = r2f(real'($urandom_range(0, 100)) / 100.0);
    hw = int'(3.0 * ((sx > sy) ? sx : sy)) + 1;
    g.aabb.x0 = (int'(mx) - hw < 0) ? 16'd0 : 16'(int'(mx) - hw);
    g.aabb.y0 = (int'(my) - hw < 0) ? 16'd0 : 16'(int'(my) - hw);
    g.aabb.x1 = 16'(int'(mx) + hw);
    g.aabb.y1 = 16'(int'(my) + hw);
    g.tag.xtile = 1'b0;
    g.tag.id    = 15'(id);
    return g;
  endfunction
endpackage
