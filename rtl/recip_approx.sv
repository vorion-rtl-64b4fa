// recip_approx: the hybrid approximation of 1/(1-alpha) used by the training
// lanes, so that no divider is needed.
//
//  * alpha < 0.5: fourth-order Taylor series 1 + a + a^2 + a^3 + a^4.
//  * alpha >= 0.5: two Newton-Raphson steps y <- y*(2 - d*y) on d = 1 - alpha,
//    seeded from an 8-entry table. alpha is limited to 0.99 first.
//
// The split at 0.5, the Taylor order, the two NR steps, the 8 table entries
// and the 0.99 limit follow the paper. How the table is indexed is this
// design's choice: by the three leading mantissa bits of d, entry k holding
// 1/(1 + (k+0.5)/8); the seed exponent is the negated exponent of d. The seed
// is then within 6% and two steps bring the error far below the 3% bound the
// paper quotes (the Taylor branch is worst at alpha -> 0.5, about 3%).
//
// Interface: combinational, alpha in, recip out.
module recip_approx
  import vorion_pkg::*;
(
  input  f32_t alpha,
  output f32_t recip
);
  localparam f32_t SEED [8] = '{32'h3f70f0f1, 32'h3f579436, 32'h3f430c31,
                                32'h3f321643, 32'h3f23d70a, 32'h3f17b426,
                                32'h3f0d3dcb, 32'h3f042108};
  f32_t a, a2, d, y0, y1, y2, taylor;
  always_comb begin
    a      = fmin(alpha, F_ALPHA_MAX);
    a2     = fmul(a, a);
    // 1 + a + a^2 + a^3 + a^4 = 1 + a + a^2 (1 + a + a^2)
    taylor = fadd(fadd(F_ONE, a), fmul(a2, fadd(fadd(F_ONE, a), a2)));
    d      = fsub(F_ONE, a);
    y0     = {1'b0, 8'(8'd253 - d[30:23]), SEED[d[22:20]][22:0]};
    y1     = fmul(y0, fsub(F_TWO, fmul(d, y0)));
    y2     = fmul(y1, fsub(F_TWO, fmul(d, y1)));
    recip  = flt(a, F_HALF) ? taylor : y2;
  end
endmodule
