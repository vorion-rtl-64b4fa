// tb_pixel_unit: loads a tail of Gaussians (FIRST..COUNT-1) from a
// behavioural L2 into the pixel unit, streams 300 pixels with random states
// (some already finished) through it with random back-pressure, and compares
// every returned pixel (matched by x,y; order is free) with the
// double-precision front-to-back reference. Checks that early termination
// happened (fewer Gaussian evaluations than pixels x Gaussians), that
// finished pixels bypass the lanes, and the overflow flag for a tail longer
// than the buffer.
module tb_pixel_unit;
  import vorion_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NG = 60, FIRST = 20, NP = 300;

  logic csr_req, csr_we, csr_rvalid;
  logic [3:0] csr_addr;
  logic [31:0] csr_wdata, csr_rdata;
  logic l2_req_valid, l2_req_ready, l2_rsp_valid;
  logic [31:0] l2_req_addr;
  gauss_t l2_rsp_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_x, in_y, out_x, out_y;
  rpix_t in_pix, out_pix;
  pixel_unit dut (.*);
  l2_model #(.LAT(6)) u_l2 (.clk, .req_valid(l2_req_valid), .req_addr(l2_req_addr),
                            .req_ready(l2_req_ready), .rsp_valid(l2_rsp_valid), .rsp_data(l2_rsp_data));

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic csr_wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); csr_req = 1; csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_req = 0; csr_we = 0;
  endtask
  task automatic csr_rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); csr_req = 1; csr_we = 0; csr_addr = a;
    @(negedge clk); csr_req = 0; d = csr_rdata;
  endtask

  gauss_t gs [NG];
  real et [NP], ec [NP][3];
  bit  edone [NP], eamb [NP], seen [NP];
  int  px [NP], py [NP];
  int  nout = 0, bad = 0;

  always @(negedge clk) out_ready = ($urandom_range(0, 4) != 0);
  always @(posedge clk) if (out_valid && out_ready) begin
    int k;
    k = -1;
    for (int j = 0; j < NP; j++) if (px[j] == int'(out_x) && py[j] == int'(out_y)) k = j;
    nout++;
    checks++;
    if (k < 0 || seen[k]) begin failures++; $display("FAIL unknown/duplicate pixel"); end
    else begin
      seen[k] = 1;
      if (!eamb[k] && (edone[k] != out_pix.t[31] || !close(rabs(f2r(out_pix.t)), et[k], 1e-4, 1e-6) ||
          !close(f2r(out_pix.c[0]), ec[k][0], 1e-4, 1e-5) || !close(f2r(out_pix.c[2]), ec[k][2], 1e-4, 1e-5))) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL pixel %0d T %g/%g C %g/%g", k, f2r(out_pix.t), et[k], f2r(out_pix.c[0]), ec[k][0]);
      end
    end
  end

  real it0 [NP], ic0 [NP][3];
  int  pi = NP;
  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      pi <= pi + 1;
    end
  end
  always_comb begin
    in_valid = (pi < NP);
    in_x = 16'(px[pi % NP]);
    in_y = 16'(py[pi % NP]);
    in_pix.t = (pi % 10 == 3) ? fneg(r2f(it0[pi % NP])) : r2f(it0[pi % NP]);
    for (int ch = 0; ch < 3; ch++) in_pix.c[ch] = r2f(ic0[pi % NP][ch]);
  end

  initial begin
    logic [31:0] v;
    int n_pre = 0;
    csr_req = 0; csr_we = 0; csr_addr = 0; csr_wdata = 0;
    for (int i = 0; i < NG; i++) begin
      gs[i] = rand_gauss(40, 40, 12, i);
      gs[i].opacity = r2f(0.6 + 0.3 * real'($urandom_range(0, 100)) / 100.0);
      gs[i].con_x = r2f(f2r(gs[i].con_x) / 16.0);   // wide splats: pixels saturate
      gs[i].con_y = r2f(f2r(gs[i].con_y) / 16.0);
      gs[i].con_z = r2f(f2r(gs[i].con_z) / 16.0);
      u_l2.mem[500 + i] = gs[i];
    end
    // pixels and reference
    for (int j = 0; j < NP; j++) begin
      real a, c3[3];
      bit skip, dn;
      px[j] = 20 + j % 40; py[j] = 20 + (j / 40) * 5;
      it0[j] = f2r(r2f(0.05 + real'($urandom_range(0, 95)) / 100.0));
      for (int ch = 0; ch < 3; ch++) ic0[j][ch] = f2r(r2f(real'($urandom_range(0, 100)) / 100.0));
      et[j] = it0[j]; ec[j] = ic0[j];
      edone[j] = (j % 10 == 3);
      if (edone[j]) n_pre++;
      eamb[j] = 0;
      for (int i = FIRST; i < NG && !edone[j]; i++) begin
        a = ref_alpha(gs[i], px[j], py[j], skip);
        if (rabs(a - 1.0/255.0) < 0.02/255.0) eamb[j] = 1;
        if (!skip && rabs(et[j] * (1.0 - a) - 1e-4) < 2e-6) eamb[j] = 1;
        c3 = ec[j]; dn = edone[j];
        ref_blend(et[j], c3, dn, a, skip, gs[i]);
        ec[j] = c3; edone[j] = dn;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    csr_wr(4'd1, 500); csr_wr(4'd2, FIRST); csr_wr(4'd3, NG);
    csr_wr(4'd0, 1);
    @(negedge clk);
    pi = 0;
    while (nout < NP) @(posedge clk);
    repeat (5) @(posedge clk);
    csr_rd(4'd6, v);
    checks++;
    $display("evaluations %0d of %0d without early termination", v, (NP - n_pre) * (NG - FIRST));
    if (v == 0 || int'(v) >= (NP - n_pre) * (NG - FIRST)) begin failures++; $display("FAIL no early termination"); end
    csr_rd(4'd5, v);
    checks++;
    if (int'(v) != NP) begin failures++; $display("FAIL pixel count %0d", v); end
    csr_rd(4'd4, v);
    checks++;
    if (v[1:0] != 2'b01) begin failures++; $display("FAIL status %b", v[1:0]); end
    // overflow: a tail longer than the buffer
    csr_wr(4'd2, 0); csr_wr(4'd3, 200);
    csr_wr(4'd0, 1);
    repeat (400) @(posedge clk);
    csr_rd(4'd4, v);
    checks++;
    if (v[1:0] != 2'b11) begin failures++; $display("FAIL overflow status %b", v[1:0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
