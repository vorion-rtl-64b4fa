// gather_unit: collects the lane results at the end of the raster pipeline.
//
// Rendering: the 16 updated pixels of a row group are written back to the
// pixel buffer (lane mask as write mask) and the pixels that collapsed in
// this group are counted (the occlusion count that drives the hand-off to
// the pixel unit).
//
// Training: the 8 lane pairs return updated pixel state, written back the
// same way (a pixel spans two lanes), and their per-pixel gradients. Two
// 8-entry adder trees reduce dL/dc (per channel) and dL/dalpha over the
// group; an accumulator adds the group sums of one Gaussian and, on that
// Gaussian's last group, emits its gradient record and clears itself.
// Gradients of masked-off pairs are forced to zero.
//
// The two 8-entry adder trees follow the training figure; the register-level
// arrangement (one tree level per function call, single-cycle accumulate) is
// this design's choice. Timing: purely combinational into the pixel-buffer
// write port; grad_valid/grad are registered (one cycle after the last
// group's write-back).
module gather_unit
  import vorion_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode,
  // token at the end of the pipeline
  input  logic              t_valid,
  input  logic [5:0]        t_y,
  input  logic [2:0]        t_xg,
  input  logic [15:0]       t_mask,
  input  logic              t_last,
  input  gtag_t             t_tag,
  // rendering lanes
  input  rpix_t [15:0]      r_pix,
  input  logic  [15:0]      r_coll,
  // training lane pairs
  input  tpix_t [7:0]       p_pix,
  input  f32_t  [7:0][2:0]  p_dc,
  input  f32_t  [7:0]       p_da,
  // pixel buffer write
  output logic              wr_en,
  output logic [5:0]        wr_y,
  output logic [2:0]        wr_xg,
  output logic [15:0]       wr_mask,
  output logic [15:0][127:0] wr_data,
  // statistics and gradients
  output logic [4:0]        n_collapsed,
  output logic              grad_valid,
  output grad_t             grad
);
  function automatic f32_t tree8(input f32_t [7:0] v);
    f32_t [3:0] l1;
    f32_t [1:0] l2;
    for (int i = 0; i < 4; i++) l1[i] = fadd(v[2*i], v[2*i+1]);
    for (int i = 0; i < 2; i++) l2[i] = fadd(l1[2*i], l1[2*i+1]);
    return fadd(l2[0], l2[1]);
  endfunction

  always_comb begin
    wr_en   = t_valid && (t_mask != '0);
    wr_y    = t_y;
    wr_xg   = t_xg;
    wr_mask = t_mask;
    n_collapsed = '0;
    for (int l = 0; l < 16; l++) begin
      if (mode == MODE_RENDER) begin
        wr_data[l] = r_pix[l];
        if (t_valid && t_mask[l] && r_coll[l]) n_collapsed = n_collapsed + 5'd1;
      end else begin
        wr_data[l] = (l % 2 == 0) ? p_pix[l/2][255:128] : p_pix[l/2][127:0];
      end
    end
  end

  // adder trees
  f32_t [2:0] sum_dc;
  f32_t       sum_da;
  always_comb begin
    f32_t [7:0] v;
    for (int ch = 0; ch < 3; ch++) begin
      for (int p = 0; p < 8; p++) v[p] = t_mask[2*p] ? p_dc[p][ch] : F_ZERO;
      sum_dc[ch] = tree8(v);
    end
    for (int p = 0; p < 8; p++) v[p] = t_mask[2*p] ? p_da[p] : F_ZERO;
    sum_da = tree8(v);
  end

  grad_t acc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      grad_valid <= 1'b0;
      grad       <= '0;
    end else begin
      grad_valid <= 1'b0;
      if (t_valid && mode == MODE_TRAIN) begin
        if (t_last) begin
          grad_valid <= 1'b1;
          grad.tag   <= t_tag;
          for (int ch = 0; ch < 3; ch++) grad.dl_dc[ch] <= fadd(acc.dl_dc[ch], sum_dc[ch]);
          grad.dl_da <= fadd(acc.dl_da, sum_da);
          acc        <= '0;
        end else begin
          for (int ch = 0; ch < 3; ch++) acc.dl_dc[ch] <= fadd(acc.dl_dc[ch], sum_dc[ch]);
          acc.dl_da  <= fadd(acc.dl_da, sum_da);
        end
      end
    end
  end
endmodule
