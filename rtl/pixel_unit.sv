// pixel_unit: the pixel-centric back end that finishes the occluded tail of a
// tile. Where the rasterizer applies one Gaussian to many pixels, each of the
// four lanes here owns one pixel and walks the remaining Gaussians of the
// list until the pixel's transmittance collapses, so deeply occluded pixels
// stop after very few Gaussians.
//
// Operation: software sets G_BASE, FIRST (the rasterizer's hand-off index)
// and COUNT and writes CTRL.start; the unit loads Gaussians FIRST..COUNT-1
// from L2 into its Gaussian buffer (GBUF_DEPTH records; a longer tail is cut
// and STATUS.overflow set). Pixels then stream in (x, y, R,G,B,T) on a
// valid/ready port. A pixel that is already finished (T < 0) passes straight
// to the output; otherwise a free lane takes it. A lane issues one Gaussian
// per cycle into the shared alpha stages (gs_alpha, two cycles) and blends
// each result into its pixel register (gs_blend), so T is fed back without a
// bubble; once T collapses the lane stops issuing, lets the two in-flight
// results fall away and offers the pixel on the output port (fixed-priority
// arbitration, lane 0 first).
//
// The paper gives the four lanes, the larger Gaussian buffer, the smaller
// pixel buffer and the per-pixel iteration; buffer sizes (128 Gaussians, one
// pixel register per lane plus the input register), the CSR map and the
// arbitration are this design's choices.
//
// CSR map (word address): 0 CTRL (W bit0 start), 1 G_BASE, 2 FIRST, 3 COUNT,
// 4 STATUS (R bit0 loaded, bit1 overflow), 5 PIX_DONE (R), 6 EVALS (R,
// Gaussian evaluations issued). Read data one cycle after the request.
module pixel_unit
  import vorion_pkg::*;
#(
  parameter int unsigned LANES      = 4,
  parameter int unsigned GBUF_DEPTH = 128
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_req,
  input  logic        csr_we,
  input  logic [3:0]  csr_addr,
  input  logic [31:0] csr_wdata,
  output logic        csr_rvalid,
  output logic [31:0] csr_rdata,
  output logic        l2_req_valid,
  output logic [31:0] l2_req_addr,
  input  logic        l2_req_ready,
  input  logic        l2_rsp_valid,
  input  gauss_t      l2_rsp_data,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] in_x,
  input  logic [15:0] in_y,
  input  rpix_t       in_pix,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] out_x,
  output logic [15:0] out_y,
  output rpix_t       out_pix
);
  localparam int unsigned AW = $clog2(GBUF_DEPTH);

  gauss_t      gmem [GBUF_DEPTH];
  logic [31:0] g_base, first, count, pix_done, evals;
  logic [AW:0] n_req, n_got, ng;
  logic        loading, loaded, overflow;

  // ---- loader
  logic [31:0] want;
  always_comb begin
    want = (count > first) ? count - first : 32'd0;
    if (want > 32'(GBUF_DEPTH)) want = 32'(GBUF_DEPTH);
  end
  assign l2_req_valid = loading && (32'(n_req) < want);
  assign l2_req_addr  = g_base + first + 32'(n_req);
  always_ff @(posedge clk) if (l2_rsp_valid && loading) gmem[n_got[AW-1:0]] <= l2_rsp_data;

  // ---- lanes
  typedef enum logic [1:0] {L_FREE, L_RUN, L_DRAIN, L_OUT} lst_e;
  lst_e  [LANES-1:0]       lst;
  rpix_t [LANES-1:0]       lpix;
  logic  [LANES-1:0][15:0] lx, ly;
  logic  [LANES-1:0][AW:0] lj;
  logic  [LANES-1:0][1:0]  ldr;
  logic  [LANES-1:0]       a_valid, a_skip, b_coll;
  f32_t  [LANES-1:0]       a_alpha;
  rpix_t [LANES-1:0]       b_pix;
  logic  [LANES-1:0][AW-1:0] a_idx_d1, a_idx_d2;

  logic [LANES-1:0] n_issue;
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic issue;
    assign issue = (lst[l] == L_RUN) && (lj[l] < ng) && !lpix[l].t[31] &&
                   !(a_valid[l] && b_coll[l]);
    assign n_issue[l] = issue;
    gs_alpha u_alpha (
      .clk, .rst_n, .in_valid(issue), .px(lx[l]), .py(ly[l]), .g(gmem[lj[l][AW-1:0]]),
      .out_valid(a_valid[l]), .alpha(a_alpha[l]), .skip(a_skip[l])
    );
    always_ff @(posedge clk) begin
      a_idx_d1[l] <= lj[l][AW-1:0];
      a_idx_d2[l] <= a_idx_d1[l];
    end
    gs_blend u_blend (
      .pix_in(lpix[l]), .alpha(a_alpha[l]), .skip(a_skip[l] || !a_valid[l]),
      .color(gmem[a_idx_d2[l]].color), .pix_out(b_pix[l]), .collapsed(b_coll[l])
    );
  end

  // ---- input acceptance and output arbitration
  logic [$clog2(LANES)-1:0] free_l, out_l;
  logic                     have_free, have_out, pass;
  always_comb begin
    have_free = 1'b0; free_l = '0;
    have_out  = 1'b0; out_l  = '0;
    for (int l = LANES - 1; l >= 0; l--) begin
      if (lst[l] == L_FREE) begin have_free = 1'b1; free_l = l[$clog2(LANES)-1:0]; end
      if (lst[l] == L_OUT)  begin have_out  = 1'b1; out_l  = l[$clog2(LANES)-1:0]; end
    end
    pass      = in_valid && in_pix.t[31] && !have_out;   // finished pixel bypasses the lanes
    in_ready  = loaded && (in_pix.t[31] ? (!have_out && out_ready) : have_free);
    out_valid = have_out || (loaded && pass);
    out_x     = have_out ? lx[out_l]   : in_x;
    out_y     = have_out ? ly[out_l]   : in_y;
    out_pix   = have_out ? lpix[out_l] : in_pix;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_base <= '0; first <= '0; count <= '0; pix_done <= '0; evals <= '0;
      n_req <= '0; n_got <= '0; ng <= '0; loading <= 1'b0; loaded <= 1'b0; overflow <= 1'b0;
      lst <= '{default: L_FREE}; lpix <= '0; lx <= '0; ly <= '0; lj <= '0; ldr <= '0;
      csr_rvalid <= 1'b0; csr_rdata <= '0;
    end else begin
      // CSR
      csr_rvalid <= csr_req && !csr_we;
      if (csr_req && !csr_we) begin
        unique case (csr_addr)
          4'd1: csr_rdata <= g_base;
          4'd2: csr_rdata <= first;
          4'd3: csr_rdata <= count;
          4'd4: csr_rdata <= {30'd0, overflow, loaded};
          4'd5: csr_rdata <= pix_done;
          4'd6: csr_rdata <= evals;
          default: csr_rdata <= '0;
        endcase
      end
      if (csr_req && csr_we) begin
        unique case (csr_addr)
          4'd0: if (csr_wdata[0]) begin
                  loading <= 1'b1; loaded <= 1'b0; n_req <= '0; n_got <= '0;
                  pix_done <= '0; evals <= '0;
                  overflow <= (count > first) && (count - first > 32'(GBUF_DEPTH));
                end
          4'd1: g_base <= csr_wdata;
          4'd2: first  <= csr_wdata;
          4'd3: count  <= csr_wdata;
          default: ;
        endcase
      end
      // loader
      if (l2_req_valid && l2_req_ready) n_req <= n_req + 1'b1;
      if (loading && l2_rsp_valid) n_got <= n_got + 1'b1;
      if (loading && 32'(n_got) == want && !(l2_rsp_valid)) begin
        loading <= 1'b0; loaded <= 1'b1; ng <= n_got;
      end
      // lanes
      evals <= evals + 32'($countones(n_issue));
      for (int l = 0; l < LANES; l++) begin
        if (a_valid[l]) lpix[l] <= b_pix[l];
        unique case (lst[l])
          L_RUN: begin
            if (lj[l] < ng && !lpix[l].t[31] && !(a_valid[l] && b_coll[l])) begin
              lj[l] <= lj[l] + 1'b1;
            end else begin
              lst[l] <= L_DRAIN; ldr[l] <= 2'd2;
            end
          end
          L_DRAIN: begin
            ldr[l] <= ldr[l] - 1'b1;
            if (ldr[l] == 2'd1) lst[l] <= L_OUT;
          end
          default: ;
        endcase
      end
      if (in_valid && in_ready && !in_pix.t[31]) begin
        lst[free_l] <= L_RUN; lpix[free_l] <= in_pix; lx[free_l] <= in_x; ly[free_l] <= in_y;
        lj[free_l]  <= '0;
      end
      if (out_valid && out_ready) begin
        pix_done <= pix_done + 1'b1;
        if (have_out) lst[out_l] <= L_FREE;
      end
    end
  end
endmodule
