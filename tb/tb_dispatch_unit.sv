// tb_dispatch_unit: feeds Gaussians with random bounding boxes (inside,
// straddling and outside the tile) to the dispatch unit in both modes and
// checks the issued groups against an independent model of the clipped
// rectangle walk: order of (y, xg), lane masks, the "last" flag, one empty
// group per culled Gaussian, and that no group is re-issued while still in
// flight (within PIPE cycles). Counts the hazard stalls and culls and fails
// if either never happened. Random hold cycles are inserted.
module tb_dispatch_unit;
  import vorion_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mode_e mode;
  logic [15:0] tile_x, tile_y, t_mask;
  logic hold, g_valid, g_pop, t_valid, t_last, culled, stalled, idle;
  gauss_t g_in, t_g;
  logic [5:0] t_y;
  logic [2:0] t_xg;
  dispatch_unit dut (.*);

  typedef struct { int y; int xg; logic [15:0] mask; bit last; int id; } grp_t;
  grp_t exp_q[$];
  int   hist_y[$], hist_xg[$], hist_t[$];
  int   cyc = 0, n_stall = 0, n_cull = 0, n_cull_exp = 0;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void model(input gauss_t g, input mode_e m);
    int h, x0, x1, y0, y1, tx, ty, gw;
    grp_t e;
    h = (m == MODE_RENDER) ? 64 : 32;
    gw = (m == MODE_RENDER) ? 16 : 8;
    tx = int'(tile_x); ty = int'(tile_y);
    x0 = int'(g.aabb.x0) - tx; x1 = int'(g.aabb.x1) - tx;
    y0 = int'(g.aabb.y0) - ty; y1 = int'(g.aabb.y1) - ty;
    if (x0 < 0) x0 = 0;
    if (y0 < 0) y0 = 0;
    if (x1 > 63) x1 = 63;
    if (y1 > h - 1) y1 = h - 1;
    if (x0 > x1 || y0 > y1) begin
      e = '{y: 0, xg: 0, mask: 16'd0, last: 1, id: int'(g.tag.id)};
      exp_q.push_back(e);
      n_cull_exp++;
      return;
    end
    for (int y = y0; y <= y1; y++)
      for (int xg = x0 / gw; xg <= x1 / gw; xg++) begin
        e.y = y; e.xg = xg; e.id = int'(g.tag.id); e.mask = '0;
        for (int l = 0; l < 16; l++) begin
          int x;
          x = (m == MODE_RENDER) ? 16 * xg + l : 8 * xg + l / 2;
          e.mask[l] = (x >= x0) && (x <= x1);
        end
        e.last = (y == y1) && (xg == x1 / gw);
        exp_q.push_back(e);
      end
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (stalled) n_stall++;
    if (culled) n_cull++;
    if (rst_n && t_valid) begin
      grp_t e;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected group"); end
      else begin
        e = exp_q.pop_front();
        if (int'(t_g.tag.id) != e.id || t_last != e.last || t_mask != e.mask ||
            (e.mask != 0 && (int'(t_y) != e.y || int'(t_xg) != e.xg))) begin
          failures++;
          if (failures < 10) $display("FAIL group id %0d y %0d/%0d xg %0d/%0d mask %h/%h last %0d/%0d",
                                      e.id, t_y, e.y, t_xg, e.xg, t_mask, e.mask, t_last, e.last);
        end
      end
      if (t_mask != 0) begin
        int pipe;
        pipe = (mode == MODE_RENDER) ? 4 : 6;
        for (int k = 0; k < hist_t.size(); k++)
          if (hist_y[k] == int'(t_y) && hist_xg[k] == int'(t_xg) && cyc - hist_t[k] <= pipe) begin
            failures++; $display("FAIL hazard: group reissued after %0d cycles", cyc - hist_t[k]);
          end
        hist_y.push_back(int'(t_y)); hist_xg.push_back(int'(t_xg)); hist_t.push_back(cyc);
        if (hist_t.size() > 8) begin void'(hist_y.pop_front()); void'(hist_xg.pop_front()); void'(hist_t.pop_front()); end
      end
    end
  end

  task automatic run(input mode_e m, input int n);
    int sent = 0;
    mode = m;
    tile_x = 16'd128; tile_y = 16'd64;
    while (sent < n) begin
      @(negedge clk);
      hold = ($urandom_range(0, 19) == 0);
      if (!g_valid || g_pop) begin
        if (g_valid && g_pop) ;  // consumed this cycle (checked at posedge)
      end
      if (!g_valid) begin
        int kind;
        kind = $urandom_range(0, 9);
        g_in = rand_gauss(160, 90, 40, sent);
        if (kind == 0) begin g_in.aabb.x0 = 16'd10; g_in.aabb.x1 = 16'd20; end    // misses
        if (kind == 1) begin                                             // tiny, repeated area
          g_in.aabb.x0 = 16'd140; g_in.aabb.x1 = 16'd141; g_in.aabb.y0 = 16'd70; g_in.aabb.y1 = 16'd70;
        end
        if (kind == 2) begin g_in.aabb.x0 = 16'd100; g_in.aabb.x1 = 16'd300; end  // spans the tile
        model(g_in, m);
        g_valid = 1;
        sent++;
      end
      @(posedge clk);
      #1;
      if (g_pop) ;
    end
  endtask

  always @(posedge clk) if (g_pop) #2 g_valid = 0;

  initial begin
    hold = 0; g_valid = 0; g_in = '0; mode = MODE_RENDER; tile_x = 0; tile_y = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MODE_RENDER, 300);
    wait (exp_q.size() == 0 && idle && !g_valid);
    repeat (10) @(posedge clk);
    run(MODE_TRAIN, 300);
    wait (exp_q.size() == 0 && idle && !g_valid);
    repeat (10) @(posedge clk);
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no hazard stall seen"); end
    checks++;
    if (n_cull != n_cull_exp || n_cull == 0) begin failures++; $display("FAIL culls %0d exp %0d", n_cull, n_cull_exp); end
    $display("stalls=%0d culls=%0d", n_stall, n_cull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
