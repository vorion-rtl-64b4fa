// raster_lane: one rendering lane of the Gaussian rasterizer, a three-stage
// pipeline (stage 1-2 in gs_alpha, stage 3 here).
//
// Every cycle the lane can take a (pixel, Gaussian) task with the pixel's
// current state (R,G,B,T) read from the pixel buffer; three cycles later it
// returns the updated state for write-back by the gather unit. The pixel
// state and colour travel alongside the alpha computation in delay
// registers. The lane never stalls; hazards on the same pixel are avoided by
// the dispatch unit, which does not issue a pixel that is still in flight.
//
// Interface: in_valid/px/py/g/pix_in in; out_valid/pix_out/collapsed out,
// latency 3. collapsed flags the task that terminated its pixel.
module raster_lane
  import vorion_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [15:0] px,
  input  logic [15:0] py,
  input  gauss_t      g,
  input  rpix_t       pix_in,
  output logic        out_valid,
  output rpix_t       pix_out,
  output logic        collapsed
);
  logic a_valid, a_skip;
  f32_t a_alpha;
  gs_alpha u_alpha (
    .clk, .rst_n, .in_valid, .px, .py, .g,
    .out_valid(a_valid), .alpha(a_alpha), .skip(a_skip)
  );

  rpix_t      pix_d1, pix_d2;
  f32_t [2:0] col_d1, col_d2;
  always_ff @(posedge clk) begin
    pix_d1 <= pix_in;   pix_d2 <= pix_d1;
    col_d1 <= g.color;  col_d2 <= col_d1;
  end

  rpix_t b_pix;
  logic  b_coll;
  gs_blend u_blend (
    .pix_in(pix_d2), .alpha(a_alpha), .skip(a_skip), .color(col_d2),
    .pix_out(b_pix), .collapsed(b_coll)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      pix_out   <= '0;
      collapsed <= 1'b0;
    end else begin
      out_valid <= a_valid;
      pix_out   <= b_pix;
      collapsed <= a_valid && b_coll;
    end
  end
endmodule
