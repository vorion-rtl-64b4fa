// tb_vorion_top: end-to-end test of the Vorion rendering subsystem at its
// default size (two sockets of four cores, one pixel unit), driven only
// through the top's ports, with one behavioural L2 per L2 port.
//
// The two sockets run at the same time:
//  * socket 0 renders a 64x64 tile in hybrid mode: the rasterizer hands off
//    when enough pixels have collapsed, a core reads HANDOFF_IDX and the
//    pixel unit is loaded with the remaining Gaussians; the tile is then
//    streamed through the pixel unit (pu_en, pu_sel = 0). Every output
//    pixel must equal the double-precision front-to-back reference over
//    all Gaussians (AABB test for the rasterizer's part only, as the pixel
//    unit evaluates every tail Gaussian for every pixel).
//  * socket 1 first renders the same tile Gaussian-centrically (output on
//    fb[1], same reference), then switches to training mode: core 1 loads
//    dL/dC and T_final of a 64x32 tile through the agent's forwarded CSR
//    window, starts the back-to-front pass, and the cores read the
//    gradient records block by block (block-ready interrupt, GRAD_SEL,
//    RELEASE), compared with the reference backward pass. The reader
//    deliberately waits before the first block so that the agent's FIFO
//    fills and holds the rasterizer.
// Mechanism counters (each must be non-zero, otherwise it is a failure):
// hazard stalls, culled Gaussians, hand-offs, render/train mode switches,
// early-terminated pixels in the rasterizer and in the pixel unit, and
// gradient-hold cycles.
module tb_vorion_top;
  import vorion_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int TX = 448, TY = 256;
  localparam int NG = 48;
  localparam int GB = 200;

  // ---------------------------------------------------------------- DUT
  logic [1:0][3:0]       core_req, core_we, core_gnt, core_rvalid;
  logic [1:0][3:0][11:0] core_addr;
  logic [1:0][3:0][31:0] core_wdata;
  logic [1:0][31:0]      core_rdata;
  logic [1:0]            block_irq;
  logic   [2:0]       l2_req_valid, l2_req_ready, l2_rsp_valid;
  logic   [2:0][31:0] l2_req_addr;
  gauss_t [2:0]       l2_rsp_data;
  logic        pu_csr_req, pu_csr_we, pu_csr_rvalid, pu_en;
  logic [3:0]  pu_csr_addr;
  logic [31:0] pu_csr_wdata, pu_csr_rdata;
  logic [0:0]  pu_sel;
  logic  [1:0]       fb_valid, fb_ready;
  logic  [1:0][15:0] fb_x, fb_y;
  rpix_t [1:0]       fb_pix;
  logic        pu_valid, pu_ready;
  logic [15:0] pu_x, pu_y;
  rpix_t       pu_pix;
  logic [1:0]       r_done, r_handed_off;
  logic [1:0][31:0] r_handoff_idx;

  vorion_top dut (.*);

  for (genvar p = 0; p < 3; p++) begin : g_l2
    gauss_t d;
    l2_model #(.LAT(12)) u_l2 (.clk, .req_valid(l2_req_valid[p]), .req_addr(l2_req_addr[p]),
                               .req_ready(l2_req_ready[p]), .rsp_valid(l2_rsp_valid[p]),
                               .rsp_data(d));
    assign l2_rsp_data[p] = d;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // per-socket core drivers (one process per socket), merged onto the ports
  logic [3:0]       dq [2], dw [2];
  logic [3:0][11:0] da [2];
  logic [3:0][31:0] dd [2];
  always_comb
    for (int s = 0; s < 2; s++) begin
      core_req[s] = dq[s]; core_we[s] = dw[s]; core_addr[s] = da[s]; core_wdata[s] = dd[s];
    end

  task automatic access(input int s, input int c, input bit we, input logic [11:0] a,
                        input logic [31:0] d, output logic [31:0] rd);
    @(negedge clk);
    dq[s][c] = 1; dw[s][c] = we; da[s][c] = a; dd[s][c] = d;
    @(posedge clk);
    while (!core_gnt[s][c]) @(posedge clk);
    @(negedge clk);
    dq[s][c] = 0;
    rd = core_rdata[s];
  endtask
  task automatic rwr(input int s, input int c, input logic [7:0] a, input logic [31:0] d);
    logic [31:0] v;
    access(s, c, 1, {4'h8, a}, d, v);
  endtask
  task automatic rrd(input int s, input int c, input logic [7:0] a, output logic [31:0] d);
    access(s, c, 0, {4'h8, a}, 0, d);
  endtask
  task automatic wait_done(input int s, input int c);
    logic [31:0] st;
    do begin
      repeat (30) @(posedge clk);
      rrd(s, c, 8'h02, st);
    end while (!st[1]);
  endtask

  task automatic pu_wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); pu_csr_req = 1; pu_csr_we = 1; pu_csr_addr = a; pu_csr_wdata = d;
    @(negedge clk); pu_csr_req = 0; pu_csr_we = 0;
  endtask
  task automatic pu_rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); pu_csr_req = 1; pu_csr_we = 0; pu_csr_addr = a;
    @(negedge clk); pu_csr_req = 0; d = pu_csr_rdata;
  endtask

  // ---------------------------------------------------------- reference
  gauss_t gs [NG];
  real    rt [2][64][64], rc [2][64][64][3];
  bit     rdone [2][64][64], ramb [2][64][64];

  // Reference for stream k. Gaussians before `split` are blended only
  // inside their AABB (the rasterizer's tile test); the pixel unit tests no
  // AABB, so Gaussians from `split` on are evaluated for every pixel.
  function automatic void ref_render(input int k, input int split);
    for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++) begin
      rt[k][x][y] = 1.0; rc[k][x][y] = '{0.0, 0.0, 0.0}; rdone[k][x][y] = 0; ramb[k][x][y] = 0;
    end
    for (int i = 0; i < NG; i++)
      for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++) begin
        int sx, sy;
        real a, c3[3], tt;
        bit skip, dn;
        sx = TX + x; sy = TY + y;
        if (i < split && (sx < int'(gs[i].aabb.x0) || sx > int'(gs[i].aabb.x1) ||
            sy < int'(gs[i].aabb.y0) || sy > int'(gs[i].aabb.y1))) continue;
        if (rdone[k][x][y]) continue;
        a = ref_alpha(gs[i], sx, sy, skip);
        if (rabs(a - 1.0/255.0) < 0.02/255.0) ramb[k][x][y] = 1;
        if (!skip && rabs(rt[k][x][y] * (1.0 - a) - 1e-4) < 2e-6) ramb[k][x][y] = 1;
        c3 = rc[k][x][y]; dn = rdone[k][x][y]; tt = rt[k][x][y];
        ref_blend(tt, c3, dn, a, skip, gs[i]);
        rc[k][x][y] = c3; rdone[k][x][y] = dn; rt[k][x][y] = tt;
      end
  endfunction

  // pixel comparison for one output stream (0: pixel unit, 1: fb[1])
  int nrx [2], bad [2], namb [2];
  bit seen [2][64][64];
  function automatic void check_pixel(input int k, input logic [15:0] px, input logic [15:0] py,
                                      input rpix_t p);
    int x, y;
    x = int'(px) - TX; y = int'(py) - TY;
    nrx[k]++;
    checks++;
    if (x < 0 || x > 63 || y < 0 || y > 63 || seen[k][x][y]) begin
      failures++; $display("FAIL stream %0d: bad or repeated pixel %0d,%0d", k, px, py);
      return;
    end
    seen[k][x][y] = 1;
    if (ramb[k][x][y]) begin namb[k]++; return; end
    if (rdone[k][x][y] != p.t[31] ||
        !close(rabs(f2r(p.t)), rt[k][x][y], 1e-4, 1e-6) ||
        !close(f2r(p.c[0]), rc[k][x][y][0], 1e-4, 1e-5) ||
        !close(f2r(p.c[1]), rc[k][x][y][1], 1e-4, 1e-5) ||
        !close(f2r(p.c[2]), rc[k][x][y][2], 1e-4, 1e-5)) begin
      failures++; bad[k]++;
      if (bad[k] < 5) $display("FAIL stream %0d pixel %0d,%0d T %g/%g C0 %g/%g", k, x, y,
                               f2r(p.t), rt[k][x][y], f2r(p.c[0]), rc[k][x][y][0]);
    end
  endfunction

  always @(negedge clk) begin
    pu_ready = ($urandom_range(0, 9) != 0);
    fb_ready = {($urandom_range(0, 5) != 0), 1'b1};
  end
  always @(posedge clk) begin
    if (rst_n && pu_valid && pu_ready) check_pixel(0, pu_x, pu_y, pu_pix);
    if (rst_n && fb_valid[1] && fb_ready[1]) check_pixel(1, fb_x[1], fb_y[1], fb_pix[1]);
    if (rst_n && fb_valid[0]) begin
      failures++; $display("FAIL socket 0 stream bypassed the pixel unit");
    end
  end

  // ---------------------------------------------------- mechanism counters
  int m_stall = 0, m_cull = 0, m_handoff = 0, m_mode = 0, m_eterm_r = 0, m_eterm_p = 0, m_hold = 0;
  mode_e pmode [2];
  logic  pho [2];
  always @(posedge clk) if (rst_n) begin
    m_stall += int'(dut.g_socket[0].u_rast.d_stalled) + int'(dut.g_socket[1].u_rast.d_stalled);
    m_cull  += int'(dut.g_socket[0].u_rast.d_culled) + int'(dut.g_socket[1].u_rast.d_culled);
    m_eterm_r += int'(dut.g_socket[0].u_rast.n_coll) + int'(dut.g_socket[1].u_rast.n_coll);
    m_eterm_p += $countones(dut.u_pu.a_valid & dut.u_pu.b_coll);
    m_hold  += int'(dut.g_socket[1].grad_hold);
    if (dut.g_socket[0].u_rast.mode != pmode[0]) m_mode++;
    if (dut.g_socket[1].u_rast.mode != pmode[1]) m_mode++;
    pmode[0] = dut.g_socket[0].u_rast.mode;
    pmode[1] = dut.g_socket[1].u_rast.mode;
    if (r_handed_off[0] && !pho[0]) m_handoff++;
    if (r_handed_off[1] && !pho[1]) m_handoff++;
    pho[0] = r_handed_off[0];
    pho[1] = r_handed_off[1];
  end

  // --------------------------------------------------------------- socket 0
  task automatic run_socket0();
    logic [31:0] v;
    int idx;
    rwr(0, 0, 8'h01, 32'h2);                 // render, hand-off enabled
    rwr(0, 0, 8'h03, TX); rwr(0, 0, 8'h04, TY);
    rwr(0, 0, 8'h05, GB); rwr(0, 0, 8'h06, NG);
    rwr(0, 0, 8'h07, 60);                    // occlusion threshold
    rwr(0, 0, 8'h08, 2);
    rwr(0, 0, 8'h00, 32'h2);                 // initialise tile
    repeat (300) @(posedge clk);
    rwr(0, 2, 8'h00, 32'h1);                 // another core starts it
    wait_done(0, 3);
    rrd(0, 1, 8'h0C, v);
    idx = int'(v);
    $display("socket 0: hand-off after %0d of %0d Gaussians", idx, NG);
    checks++;
    if (idx <= 0 || idx >= NG) begin failures++; $display("FAIL hand-off index %0d", idx); end
    ref_render(0, idx);
    pu_wr(4'd1, GB); pu_wr(4'd2, v); pu_wr(4'd3, NG);
    pu_wr(4'd0, 1);
    do pu_rd(4'd4, v); while (!v[0]);
    rwr(0, 0, 8'h00, 32'h8);                 // stream out through the pixel unit
    while (nrx[0] < 4096) @(posedge clk);
    pu_rd(4'd6, v);
    $display("socket 0: pixel unit evaluated %0d Gaussian-pixel pairs", v);
  endtask

  // --------------------------------------------------------------- socket 1
  real G[64][32][3], TF[64][32], T[64][32], ACC[64][32][3], bgv[3];
  real edc[NG][3], eda[NG];

  task automatic run_socket1();
    logic [31:0] v;
    int ngot = 0, expect_i = NG - 1;
    // Gaussian-centric render
    rwr(1, 1, 8'h01, 32'h0);
    rwr(1, 1, 8'h03, TX); rwr(1, 1, 8'h04, TY);
    rwr(1, 1, 8'h05, GB); rwr(1, 1, 8'h06, NG);
    rwr(1, 1, 8'h00, 32'h2);
    repeat (300) @(posedge clk);
    rwr(1, 1, 8'h00, 32'h1);
    wait_done(1, 0);
    rwr(1, 1, 8'h00, 32'h8);
    while (nrx[1] < 4096) @(posedge clk);
    // switch to training
    for (int ch = 0; ch < 3; ch++) bgv[ch] = 0.2 * real'(ch + 1);
    rwr(1, 1, 8'h01, 32'h1);
    rwr(1, 1, 8'h09, r2f(bgv[0])); rwr(1, 1, 8'h0A, r2f(bgv[1])); rwr(1, 1, 8'h0B, r2f(bgv[2]));
    for (int y = 0; y < 32; y++) for (int x = 0; x < 64; x++) begin
      rwr(1, 1, 8'h10, {18'd0, 6'(y), 2'd0, 6'(x)});
      TF[x][y] = f2r(r2f(0.01 + real'($urandom_range(0, 500)) / 1000.0));
      T[x][y] = TF[x][y];
      for (int ch = 0; ch < 3; ch++) begin
        G[x][y][ch] = f2r(r2f((real'($urandom_range(0, 200)) - 100.0) / 1000.0));
        ACC[x][y][ch] = 0.0;
        rwr(1, 1, 8'h18 + 8'(ch), r2f(G[x][y][ch]));
        rwr(1, 1, 8'h1C + 8'(ch), 32'd0);
      end
      rwr(1, 1, 8'h1B, r2f(T[x][y]));
      rwr(1, 1, 8'h1F, r2f(TF[x][y]));
    end
    ref_backward();
    rwr(1, 2, 8'h00, 32'h1);
    // the cores are busy elsewhere for a while: the FIFO fills and holds
    while (!block_irq[1]) @(posedge clk);
    repeat (3000) @(posedge clk);
    while (ngot < NG) begin
      int n;
      while (!block_irq[1]) @(posedge clk);
      access(1, 3, 0, 12'h900, 0, v);
      n = (int'(v[15:8]) < 16) ? int'(v[15:8]) : 16;
      for (int k = 0; k < n; k++) begin
        int c;
        logic [31:0] tg, dc[3], dl;
        c = k % 4;
        access(1, c, 1, 12'h901, k, v);
        access(1, c, 0, 12'h902, 0, tg);
        for (int ch = 0; ch < 3; ch++) access(1, c, 0, 12'h903 + 12'(ch), 0, dc[ch]);
        access(1, c, 0, 12'h906, 0, dl);
        checks++;
        if (int'(tg[14:0]) != int'(gs[expect_i].tag.id)) begin
          failures++; $display("FAIL grad order %0d exp %0d", tg[14:0], expect_i);
        end
        for (int ch = 0; ch < 3; ch++)
          if (!close(f2r(dc[ch]), edc[expect_i][ch], 2e-3, 1e-5)) begin
            failures++; $display("FAIL dLdc[%0d] g%0d %g exp %g", ch, expect_i, f2r(dc[ch]), edc[expect_i][ch]);
          end
        if (!close(f2r(dl), eda[expect_i], 2e-3, 1e-4)) begin
          failures++; $display("FAIL dLda g%0d %g exp %g", expect_i, f2r(dl), eda[expect_i]);
        end
        expect_i--;
        ngot++;
      end
      access(1, 0, 1, 12'h907, 0, v);
      repeat (3) @(posedge clk);
    end
    $display("socket 1: %0d gradient records read through the agent", ngot);
  endtask

  function automatic void ref_backward();
    for (int i = NG - 1; i >= 0; i--) begin
      edc[i] = '{0.0, 0.0, 0.0}; eda[i] = 0.0;
      for (int y = 0; y < 32; y++) for (int x = 0; x < 64; x++) begin
        int sx, sy;
        real a, rcp, ti, dot, bgd;
        bit skip;
        sx = TX + x; sy = TY + y;
        if (sx < int'(gs[i].aabb.x0) || sx > int'(gs[i].aabb.x1) ||
            sy < int'(gs[i].aabb.y0) || sy > int'(gs[i].aabb.y1)) continue;
        a = ref_alpha(gs[i], sx, sy, skip);
        if (skip) continue;
        rcp = (a < 0.5) ? (1.0 + a + a*a + a*a*a + a*a*a*a) : 1.0 / (1.0 - a);
        ti = T[x][y] * rcp;
        dot = 0.0; bgd = 0.0;
        for (int ch = 0; ch < 3; ch++) begin
          edc[i][ch] += ti * a * G[x][y][ch];
          dot += (f2r(gs[i].color[ch]) - ACC[x][y][ch]) * G[x][y][ch];
          bgd += bgv[ch] * G[x][y][ch];
          ACC[x][y][ch] = a * f2r(gs[i].color[ch]) + (1.0 - a) * ACC[x][y][ch];
        end
        eda[i] += ti * dot - TF[x][y] * rcp * bgd;
        T[x][y] = ti;
      end
    end
  endfunction

  initial begin
    for (int s = 0; s < 2; s++) begin dq[s] = '0; dw[s] = '0; da[s] = '0; dd[s] = '0; end
    pu_csr_req = 0; pu_csr_we = 0; pu_csr_addr = 0; pu_csr_wdata = 0;
    pu_en = 1; pu_sel = 0;
    nrx = '{0, 0}; bad = '{0, 0}; namb = '{0, 0};
    pmode = '{MODE_RENDER, MODE_RENDER}; pho = '{0, 0};
    for (int i = 0; i < NG; i++) begin
      gs[i] = rand_gauss(TX + 32, TY + 32, 36, i);
      if (i % 9 == 4) begin gs[i].aabb.x0 = 16'(TX + 100); gs[i].aabb.x1 = 16'(TX + 110); end
      if (i % 5 == 1) begin gs[i] = gs[i-1]; gs[i].tag.id = 15'(i); end
      if (i % 3 == 0) begin                // wide, nearly opaque splats: pixels saturate
        gs[i].opacity = r2f(0.97);
        gs[i].con_x = r2f(f2r(gs[i].con_x) / 9.0);
        gs[i].con_y = r2f(f2r(gs[i].con_y) / 9.0);
        gs[i].con_z = r2f(f2r(gs[i].con_z) / 9.0);
        gs[i].aabb = '{x0: 16'(TX - 8), y0: 16'(TY - 8), x1: 16'(TX + 71), y1: 16'(TY + 71)};
      end
      g_l2[0].u_l2.mem[GB + i] = gs[i];
      g_l2[1].u_l2.mem[GB + i] = gs[i];
      g_l2[2].u_l2.mem[GB + i] = gs[i];
    end
    ref_render(1, NG);
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      run_socket0();
      run_socket1();
    join
    repeat (10) @(posedge clk);
    $display("pixels: pixel unit %0d (%0d near a threshold), fb[1] %0d (%0d near a threshold)",
             nrx[0], namb[0], nrx[1], namb[1]);
    $display("mechanisms: stall=%0d cull=%0d handoff=%0d mode_switch=%0d early_term_raster=%0d early_term_pixel_unit=%0d grad_hold=%0d",
             m_stall, m_cull, m_handoff, m_mode, m_eterm_r, m_eterm_p, m_hold);
    checks += 7;
    if (m_stall == 0)   begin failures++; $display("FAIL no stall"); end
    if (m_cull == 0)    begin failures++; $display("FAIL no cull"); end
    if (m_handoff == 0) begin failures++; $display("FAIL no hand-off"); end
    if (m_mode == 0)    begin failures++; $display("FAIL no mode switch"); end
    if (m_eterm_r == 0) begin failures++; $display("FAIL no early termination in the rasterizer"); end
    if (m_eterm_p == 0) begin failures++; $display("FAIL no early termination in the pixel unit"); end
    if (m_hold == 0)    begin failures++; $display("FAIL no gradient hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
