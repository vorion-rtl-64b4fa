// gs_alpha: stages 1 and 2 of a raster lane - the opacity a Gaussian
// contributes at one pixel.
//
// Stage 1 forms the offset of the pixel from the projected mean,
// dx = mu_x - P_x and dy = mu_y - P_y, and the three products of the
// quadratic form with the inverse covariance (conic): con_x*dx*dx,
// con_z*dx*dy and con_y*dy*dy. Stage 2 adds them (the cross term twice),
// halves and negates the sum to get the exponent ("power"), takes exp and
// scales by the opacity:
//     alpha = o * exp(-1/2 * dP^T Sigma^-1 dP)
// This stage layout follows the lane drawing of the rasterizer. As in the
// reference 3DGS rasterizer, alpha is clamped to 0.99 and the pair is marked
// "skip" when the power is positive or alpha < 1/255; those two rules are taken
// from the reference software, not from the hardware description.
//
// Interface: in_valid/px/py/g are sampled every cycle (no stall); the result
// appears two cycles later on out_valid/alpha/skip. P_x and P_y are the
// integer pixel coordinates converted to FP32.
module gs_alpha
  import vorion_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [15:0] px,
  input  logic [15:0] py,
  input  gauss_t      g,
  output logic        out_valid,
  output f32_t        alpha,
  output logic        skip
);
  // stage 1
  logic s1_valid;
  f32_t s1_qx, s1_qz, s1_qy, s1_op;
  f32_t dx, dy;
  always_comb begin
    dx = fsub(g.mu_x, u2f(px));
    dy = fsub(g.mu_y, u2f(py));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_qx <= F_ZERO; s1_qz <= F_ZERO; s1_qy <= F_ZERO; s1_op <= F_ZERO;
    end else begin
      s1_valid <= in_valid;
      s1_qx <= fmul(g.con_x, fmul(dx, dx));
      s1_qz <= fmul(g.con_z, fmul(dx, dy));
      s1_qy <= fmul(g.con_y, fmul(dy, dy));
      s1_op <= g.opacity;
    end
  end

  // stage 2
  f32_t q, power, a_raw;
  always_comb begin
    q     = fadd(fadd(s1_qx, s1_qy), fmul(s1_qz, F_TWO));
    power = fneg(fmul(q, F_HALF));
    a_raw = fmin(fmul(s1_op, fexp(power)), F_ALPHA_MAX);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      alpha     <= F_ZERO;
      skip      <= 1'b1;
    end else begin
      out_valid <= s1_valid;
      alpha     <= a_raw;
      skip      <= flt(F_ZERO, power) || flt(a_raw, F_ALPHA_MIN);
    end
  end
endmodule
