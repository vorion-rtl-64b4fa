// dispatch_unit: turns Gaussians into pixel tasks for the raster lanes.
//
// For each Gaussian taken from the Gaussian buffer it intersects the
// Gaussian's screen-space AABB with the current tile (64x64 when rendering,
// 64x32 when training) - this removes the false-positive pixels a plain
// tile-overlap test would send. It then walks the surviving rectangle row by
// row in aligned groups of 16 pixels (rendering: lane L takes pixel
// x = 16*xg + L) or 8 pixels (training: lane pair p takes x = 8*xg + p), and
// issues one group per cycle with a lane mask of the pixels that lie inside
// the rectangle. A Gaussian whose AABB misses the tile produces one empty
// group, so every Gaussian leaves exactly one "last" group behind it (the
// gather unit needs this to close the Gaussian's gradient record).
//
// Read-after-write hazards on the pixel buffer are resolved here: the unit
// remembers the row groups issued in the last PIPE cycles (the read, lane and
// write-back stages) and stalls while the next group is among them - the
// stall appears when consecutive Gaussians hit the same pixels. hold stops
// issue from outside (gradient output full).
//
// The row-group walk and the hazard scoreboard are this design's choices;
// the paper states that the AABB is intersected with the tile before
// blending and that surviving pixel tasks go to the lanes.
module dispatch_unit
  import vorion_pkg::*;
#(
  parameter int unsigned PIPE_RENDER = 4,
  parameter int unsigned PIPE_TRAIN  = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  logic [15:0] tile_x,
  input  logic [15:0] tile_y,
  input  logic        hold,
  // from the Gaussian buffer
  input  logic        g_valid,
  input  gauss_t      g_in,
  output logic        g_pop,
  // issued group
  output logic        t_valid,
  output logic [5:0]  t_y,
  output logic [2:0]  t_xg,
  output logic [15:0] t_mask,
  output logic        t_last,
  output gauss_t      t_g,
  // statistics
  output logic        culled,     // a Gaussian missed the tile
  output logic        stalled,    // a group waited on a hazard
  output logic        idle
);
  localparam int unsigned PMAX = (PIPE_TRAIN > PIPE_RENDER) ? PIPE_TRAIN : PIPE_RENDER;

  logic        busy;
  gauss_t      cur;
  logic [5:0]  rx0, rx1, ry0, ry1, cy;
  logic [2:0]  cxg, xg0, xg1;
  logic        cur_empty;

  // ---- intersection of the incoming Gaussian with the tile
  logic [16:0] th;
  logic [16:0] ax0, ax1, ay0, ay1;    // relative to tile, clipped
  logic        miss;
  logic [5:0]  n_rx0, n_rx1, n_ry0, n_ry1;
  always_comb begin
    th   = (mode == MODE_RENDER) ? 17'd64 : 17'd32;
    miss = (g_in.aabb.x1 < tile_x) || ({1'b0, g_in.aabb.x0} >= {1'b0, tile_x} + 17'd64) ||
           (g_in.aabb.y1 < tile_y) || ({1'b0, g_in.aabb.y0} >= {1'b0, tile_y} + th) ||
           (g_in.aabb.x1 < g_in.aabb.x0) || (g_in.aabb.y1 < g_in.aabb.y0);
    ax0  = (g_in.aabb.x0 > tile_x) ? 17'(g_in.aabb.x0 - tile_x) : 17'd0;
    ay0  = (g_in.aabb.y0 > tile_y) ? 17'(g_in.aabb.y0 - tile_y) : 17'd0;
    ax1  = 17'(g_in.aabb.x1) - 17'(tile_x);
    ay1  = 17'(g_in.aabb.y1) - 17'(tile_y);
    if (ax1 > 17'd63)   ax1 = 17'd63;
    if (ay1 > th - 1)   ay1 = th - 17'd1;
    n_rx0 = ax0[5:0]; n_rx1 = ax1[5:0];
    n_ry0 = ay0[5:0]; n_ry1 = ay1[5:0];
  end

  // ---- scoreboard of groups in flight
  logic [PMAX-1:0]       sb_v;
  logic [PMAX-1:0][8:0]  sb_id;
  logic [3:0]            depth;
  logic                  hazard;
  assign depth = (mode == MODE_RENDER) ? 4'(PIPE_RENDER) : 4'(PIPE_TRAIN);
  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < PMAX; i++)
      if (i < int'(depth) && sb_v[i] && sb_id[i] == {cy, cxg} && !cur_empty) hazard = 1'b1;
  end

  // ---- group mask
  logic [2:0]  xg_of_x0, xg_of_x1;
  always_comb begin
    xg_of_x0 = (mode == MODE_RENDER) ? {1'b0, n_rx0[5:4]} : n_rx0[5:3];
    xg_of_x1 = (mode == MODE_RENDER) ? {1'b0, n_rx1[5:4]} : n_rx1[5:3];
    t_mask = '0;
    for (int l = 0; l < 16; l++) begin
      logic [6:0] x;
      if (mode == MODE_RENDER) x = 7'({cxg[1:0], 4'(l)});
      else                     x = 7'({cxg, 3'(l / 2)});
      t_mask[l] = !cur_empty && (x >= 7'(rx0)) && (x <= 7'(rx1));
    end
  end

  logic issue, row_end, grp_end;
  assign t_valid = busy && !hazard && !hold;
  assign issue   = t_valid;
  assign row_end = (cxg == xg1);
  assign grp_end = cur_empty || (row_end && cy == ry1);
  assign t_last  = grp_end;
  assign t_y     = cy;
  assign t_xg    = cxg;
  assign t_g     = cur;
  assign g_pop   = !busy && g_valid;
  assign culled  = g_pop && miss;
  assign stalled = busy && hazard && !hold;
  assign idle    = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur_empty <= 1'b0;
      rx0 <= '0; rx1 <= '0; ry0 <= '0; ry1 <= '0; cy <= '0; cxg <= '0;
      xg0 <= '0; xg1 <= '0; sb_v <= '0; sb_id <= '0;
      cur <= '0;
    end else begin
      sb_v  <= {sb_v[PMAX-2:0], issue && !cur_empty};
      sb_id <= {sb_id[PMAX-2:0], {cy, cxg}};
      if (g_pop) begin
        busy      <= 1'b1;
        cur       <= g_in;
        cur_empty <= miss;
        rx0 <= n_rx0; rx1 <= n_rx1; ry0 <= n_ry0; ry1 <= n_ry1;
        cy  <= n_ry0;
        cxg <= xg_of_x0; xg0 <= xg_of_x0; xg1 <= xg_of_x1;
      end else if (issue) begin
        if (grp_end) begin
          busy <= 1'b0;
        end else if (row_end) begin
          cxg <= xg0;
          cy  <= cy + 1'b1;
        end else begin
          cxg <= cxg + 1'b1;
        end
      end
    end
  end
endmodule
