// grad_lane_pair: a pair of raster lanes in the training set-up. The even
// lane recomputes alpha_i (stages 1-2, shared with rendering) and recovers
// the transmittance in front of Gaussian i while walking back to front,
// T_i = T_(i+1) / (1 - alpha_i), with the reciprocal approximation
// (stage 3). The odd lane then forms the colour and opacity gradients
// (stages 4-5):
//     dL/dc_i     = T_i * alpha_i * dL/dC
//     dL/dalpha_i = T_i * (c_i - C_accum) . dL/dC
//                   - T_final / (1 - alpha_i) * C_bg . dL/dC
//     C_accum    <- alpha_i * c_i + (1 - alpha_i) * C_accum
//     T          <- T_i
// This is the per-pixel gradient of the paper and of the reference 3DGS
// backward pass; the update order of C_accum is the reference software's
// ("colour accumulated behind Gaussian i").
//
// Per pixel the buffer holds dL/dC (3), T, C_accum (3) and T_final. The pixel
// is untouched (and both gradients zero) when alpha_i < 1/255 or the power is
// positive. The pair does not know which Gaussians the forward pass skipped
// after the pixel collapsed; software must not feed the backward pass
// Gaussians behind a pixel's last contributor (the design's assumption).
//
// Interface: one task per cycle, latency 5, no stall.
module grad_lane_pair
  import vorion_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [15:0] px,
  input  logic [15:0] py,
  input  gauss_t      g,
  input  tpix_t       pix_in,
  input  f32_t [2:0]  bg,
  output logic        out_valid,
  output tpix_t       pix_out,
  output f32_t [2:0]  dl_dc,
  output f32_t        dl_da
);
  // ---- even lane: stages 1-2
  logic a_valid, a_skip;
  f32_t a_alpha;
  gs_alpha u_alpha (
    .clk, .rst_n, .in_valid, .px, .py, .g,
    .out_valid(a_valid), .alpha(a_alpha), .skip(a_skip)
  );
  tpix_t      pix_d1, pix_d2;
  f32_t [2:0] col_d1, col_d2;
  f32_t [2:0] bg_d1, bg_d2;
  always_ff @(posedge clk) begin
    pix_d1 <= pix_in;  pix_d2 <= pix_d1;
    col_d1 <= g.color; col_d2 <= col_d1;
    bg_d1  <= bg;      bg_d2  <= bg_d1;
  end

  // ---- even lane: stage 3 (reciprocal, T_i)
  f32_t recip;
  recip_approx u_recip (.alpha(a_alpha), .recip(recip));
  logic       s3_valid, s3_skip;
  f32_t       s3_alpha, s3_recip, s3_ti;
  tpix_t      s3_pix;
  f32_t [2:0] s3_col, s3_bg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s3_valid <= 1'b0;
    else        s3_valid <= a_valid;
  end
  always_ff @(posedge clk) begin
    s3_skip  <= a_skip;
    s3_alpha <= a_alpha;
    s3_recip <= recip;
    s3_ti    <= fmul(pix_d2.t, recip);
    s3_pix   <= pix_d2;
    s3_col   <= col_d2;
    s3_bg    <= bg_d2;
  end

  // ---- odd lane: stage 4
  logic       s4_valid, s4_skip;
  f32_t       s4_alpha, s4_ti, s4_ta, s4_bgterm;
  f32_t [2:0] s4_diff, s4_col;
  tpix_t      s4_pix;
  f32_t       bgdot;
  always_comb begin
    bgdot = fadd(fadd(fmul(s3_bg[0], s3_pix.g[0]), fmul(s3_bg[1], s3_pix.g[1])),
                 fmul(s3_bg[2], s3_pix.g[2]));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s4_valid <= 1'b0;
    else        s4_valid <= s3_valid;
  end
  always_ff @(posedge clk) begin
    s4_skip   <= s3_skip;
    s4_alpha  <= s3_alpha;
    s4_ti     <= s3_ti;
    s4_ta     <= fmul(s3_ti, s3_alpha);
    for (int ch = 0; ch < 3; ch++)
      s4_diff[ch] <= fmul(fsub(s3_col[ch], s3_pix.acc[ch]), s3_pix.g[ch]);
    s4_bgterm <= fmul(fmul(s3_pix.tf, s3_recip), bgdot);
    s4_col    <= s3_col;
    s4_pix    <= s3_pix;
  end

  // ---- odd lane: stage 5
  f32_t       om;
  tpix_t      np;
  f32_t [2:0] ndc;
  f32_t       nda;
  always_comb begin
    om  = fsub(F_ONE, s4_alpha);
    np  = s4_pix;
    ndc = '0;
    nda = F_ZERO;
    if (!s4_skip) begin
      for (int ch = 0; ch < 3; ch++) begin
        ndc[ch]    = fmul(s4_ta, s4_pix.g[ch]);
        np.acc[ch] = fadd(fmul(s4_alpha, s4_col[ch]), fmul(om, s4_pix.acc[ch]));
      end
      nda  = fsub(fmul(s4_ti, fadd(fadd(s4_diff[0], s4_diff[1]), s4_diff[2])), s4_bgterm);
      np.t = s4_ti;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pix_out   <= '0;
      dl_dc     <= '0;
      dl_da     <= F_ZERO;
    end else begin
      out_valid <= s4_valid;
      pix_out   <= np;
      dl_dc     <= ndc;
      dl_da     <= nda;
    end
  end
endmodule
