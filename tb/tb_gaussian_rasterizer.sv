// tb_gaussian_rasterizer: end-to-end test of one Gaussian rasterizer through
// its CSR port, with a behavioural L2.
//  1. Rendering: initialise the tile, blend N random Gaussians front to back
//     over a 64x64 tile, stream the tile out and compare every pixel with a
//     double-precision reference (pixels whose reference touched a threshold
//     within 1% are skipped and counted). Checks the issue rate: the run
//     may take at most (pixel groups + 8 per Gaussian + fill latency) cycles.
//  2. Rendering with hand-off: an occlusion threshold stops the run; the
//     tile must equal the reference over the first HANDOFF_IDX Gaussians.
//  3. Training: load dL/dC, T_final and C_accum = 0 into a 64x32 tile
//     through CSRs, run the back-to-front pass and compare every Gaussian's
//     gradient record with the reference backward pass; random gradient
//     hold cycles are applied.
// Culls and hazard stalls must both have occurred.
module tb_gaussian_rasterizer;
  import vorion_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int TX = 320, TY = 192;
  localparam int NG = 48;

  logic csr_req, csr_we, csr_rvalid;
  logic [7:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic l2_req_valid, l2_req_ready, l2_rsp_valid;
  logic [31:0] l2_req_addr;
  gauss_t l2_rsp_data;
  logic grad_valid, grad_hold, pix_valid, pix_ready, done, handed_off;
  grad_t grad;
  logic [15:0] pix_x, pix_y;
  rpix_t pix_data;
  logic [31:0] handoff_idx;

  gaussian_rasterizer dut (.*);
  l2_model #(.LAT(10)) u_l2 (.clk, .req_valid(l2_req_valid), .req_addr(l2_req_addr),
                             .req_ready(l2_req_ready), .rsp_valid(l2_rsp_valid), .rsp_data(l2_rsp_data));

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic csr_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); csr_req = 1; csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_req = 0; csr_we = 0;
  endtask
  task automatic csr_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); csr_req = 1; csr_we = 0; csr_addr = a;
    @(negedge clk); csr_req = 0; d = csr_rdata;
  endtask

  gauss_t gs [NG];
  real    rt [64][64], rc [64][64][3];
  bit     rdone [64][64], ramb [64][64];

  function automatic void ref_render(input int upto);
    for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++) begin
      rt[x][y] = 1.0; rc[x][y] = '{0.0, 0.0, 0.0}; rdone[x][y] = 0; ramb[x][y] = 0;
    end
    for (int i = 0; i < upto; i++)
      for (int y = 0; y < 64; y++) for (int x = 0; x < 64; x++) begin
        int sx, sy;
        real a, tt, c3[3];
        bit skip, dn;
        sx = TX + x; sy = TY + y;
        if (sx < int'(gs[i].aabb.x0) || sx > int'(gs[i].aabb.x1) ||
            sy < int'(gs[i].aabb.y0) || sy > int'(gs[i].aabb.y1)) continue;
        a = ref_alpha(gs[i], sx, sy, skip);
        if (rdone[x][y]) continue;
        if (rabs(a - 1.0/255.0) < 0.02/255.0) ramb[x][y] = 1;
        tt = rt[x][y] * (1.0 - a);
        if (!skip && rabs(tt - 1e-4) < 2e-6) ramb[x][y] = 1;
        c3 = rc[x][y]; dn = rdone[x][y];
        ref_blend(rt[x][y], c3, dn, a, skip, gs[i]);
        rc[x][y] = c3; rdone[x][y] = dn;
      end
  endfunction

  task automatic wait_done();
    logic [31:0] st;
    do begin
      repeat (20) @(posedge clk);
      csr_rd(8'h02, st);
    end while (!st[1]);
  endtask

  task automatic check_tile(input string what);
    int got = 0, amb = 0, bad = 0;
    csr_wr(8'h00, 32'h8);   // stream out
    while (got < 4096) begin
      @(posedge clk);
      if (pix_valid && pix_ready) begin
        int x, y;
        x = int'(pix_x) - TX; y = int'(pix_y) - TY;
        got++;
        if (ramb[x][y]) begin amb++; continue; end
        checks++;
        if (rdone[x][y] != pix_data.t[31] ||
            !close(rabs(f2r(pix_data.t)), rt[x][y], 1e-4, 1e-6) ||
            !close(f2r(pix_data.c[0]), rc[x][y][0], 1e-4, 1e-5) ||
            !close(f2r(pix_data.c[1]), rc[x][y][1], 1e-4, 1e-5) ||
            !close(f2r(pix_data.c[2]), rc[x][y][2], 1e-4, 1e-5)) begin
          failures++; bad++;
          if (bad < 5) $display("FAIL %s pixel %0d,%0d T %g/%g C0 %g/%g", what, x, y,
                                f2r(pix_data.t), rt[x][y], f2r(pix_data.c[0]), rc[x][y][0]);
        end
      end
    end
    $display("%s: %0d pixels compared, %0d near a threshold skipped", what, 4096 - amb, amb);
  endtask

  always @(negedge clk) pix_ready = ($urandom_range(0, 9) != 0);

  int n_cull = 0, n_stall = 0, n_groups = 0, run_cycles = 0;
  always @(posedge clk) begin
    if (dut.d_culled) n_cull++;
    if (dut.d_stalled) n_stall++;
    if (dut.t_valid) n_groups++;
    if (dut.state == dut.S_RUN) run_cycles++;
  end

  initial begin
    logic [31:0] v;
    csr_req = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0; grad_hold = 0;
    for (int i = 0; i < NG; i++) begin
      gs[i] = rand_gauss(TX + 32, TY + 32, 36, i);
      if (i % 9 == 4) begin gs[i].aabb.x0 = 16'(TX + 100); gs[i].aabb.x1 = 16'(TX + 110); end
      if (i % 5 == 1) begin gs[i] = gs[i-1]; gs[i].tag.id = 15'(i); end  // same pixels again
      u_l2.mem[100 + i] = gs[i];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---------------- 1. rendering
    csr_wr(8'h01, 32'h0);
    csr_wr(8'h03, TX); csr_wr(8'h04, TY);
    csr_wr(8'h05, 100); csr_wr(8'h06, NG);
    csr_wr(8'h00, 32'h2);                       // init tile
    repeat (300) @(posedge clk);
    n_groups = 0; run_cycles = 0;
    csr_wr(8'h00, 32'h1);
    wait_done();
    checks++;
    if (run_cycles > n_groups + 8 * NG + 40) begin
      failures++; $display("FAIL rate: %0d cycles for %0d groups", run_cycles, n_groups);
    end
    $display("render: %0d groups in %0d cycles", n_groups, run_cycles);
    ref_render(NG);
    check_tile("render");
    csr_rd(8'h0E, v);
    checks++;
    if (v == 0 || int'(v) != n_cull) begin failures++; $display("FAIL cull count %0d", v); end
    // ---------------- 2. rendering with hand-off
    csr_wr(8'h01, 32'h2);
    csr_wr(8'h07, 150);                         // occluded pixels
    csr_wr(8'h08, 2);
    csr_wr(8'h00, 32'h2);
    repeat (300) @(posedge clk);
    csr_wr(8'h00, 32'h1);
    wait_done();
    csr_rd(8'h02, v);
    checks++;
    if (!v[2]) begin failures++; $display("FAIL no hand-off"); end
    csr_rd(8'h0C, v);
    $display("hand-off after %0d Gaussians", v);
    checks++;
    if (v == 0 || v >= NG) begin failures++; $display("FAIL hand-off index"); end
    ref_render(int'(v));
    check_tile("hand-off");
    // ---------------- 3. training
    begin
      real G[64][32][3], TF[64][32], T[64][32], ACC[64][32][3], bgv[3];
      real edc[NG][3], eda[NG];
      bit  used[NG];
      int  ngot = 0;
      for (int ch = 0; ch < 3; ch++) bgv[ch] = 0.25 * real'(ch + 1);
      csr_wr(8'h01, 32'h1);
      csr_wr(8'h09, r2f(bgv[0])); csr_wr(8'h0A, r2f(bgv[1])); csr_wr(8'h0B, r2f(bgv[2]));
      for (int y = 0; y < 32; y++) for (int x = 0; x < 64; x++) begin
        csr_wr(8'h10, {18'd0, 6'(y), 2'd0, 6'(x)});
        TF[x][y] = 0.01 + real'($urandom_range(0, 500)) / 1000.0;
        T[x][y] = f2r(r2f(TF[x][y])); TF[x][y] = T[x][y];
        for (int ch = 0; ch < 3; ch++) begin
          G[x][y][ch] = f2r(r2f((real'($urandom_range(0, 200)) - 100.0) / 1000.0));
          ACC[x][y][ch] = 0.0;
          csr_wr(8'h18 + 8'(ch), r2f(G[x][y][ch]));
          csr_wr(8'h1C + 8'(ch), 32'd0);
        end
        csr_wr(8'h1B, r2f(T[x][y]));
        csr_wr(8'h1F, r2f(TF[x][y]));
      end
      // reference backward pass, back to front
      for (int i = NG - 1; i >= 0; i--) begin
        edc[i] = '{0.0, 0.0, 0.0}; eda[i] = 0.0; used[i] = 0;
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
      fork
        begin
          csr_wr(8'h00, 32'h1);
          wait_done();
        end
        begin
          int expect_i = NG - 1;
          while (ngot < NG) begin
            @(posedge clk);
            grad_hold <= ($urandom_range(0, 9) == 0);
            if (grad_valid) begin
              real mag;
              ngot++;
              checks++;
              if (int'(grad.tag.id) != int'(gs[expect_i].tag.id)) begin
                failures++; $display("FAIL grad order %0d exp %0d", grad.tag.id, expect_i);
              end
              mag = 1e-4 + 1e-3 * (rabs(edc[expect_i][0]) + rabs(eda[expect_i]));
              for (int ch = 0; ch < 3; ch++)
                if (!close(f2r(grad.dl_dc[ch]), edc[expect_i][ch], 2e-3, 1e-5)) begin
                  failures++; $display("FAIL dLdc[%0d] g%0d %g exp %g", ch, expect_i, f2r(grad.dl_dc[ch]), edc[expect_i][ch]);
                end
              if (!close(f2r(grad.dl_da), eda[expect_i], 2e-3, 1e-4)) begin
                failures++; $display("FAIL dLda g%0d %g exp %g", expect_i, f2r(grad.dl_da), eda[expect_i]);
              end
              expect_i--;
            end
          end
        end
      join
      $display("training: %0d gradient records", ngot);
    end
    checks++;
    if (n_stall == 0 || n_cull == 0) begin failures++; $display("FAIL coverage stall %0d cull %0d", n_stall, n_cull); end
    $display("stalls=%0d culls=%0d", n_stall, n_cull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
