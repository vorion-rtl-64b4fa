// gaussian_rasterizer: the fixed-function unit that blends depth-sorted
// Gaussians into a pixel tile (rendering) and computes the per-Gaussian colour
// and opacity gradients (training).
//
// Structure (following the rasterizer figures): top control and a CSR block,
// an L2 interface that fetches Gaussian records into the 1R1W Gaussian
// buffer, a dispatch unit (AABB-tile intersection, row-group walk, hazard
// stall), 16 three-stage rendering lanes, 8 five-stage training lane pairs, a
// gather unit and the 16-bank 1R1W pixel buffer that holds the whole tile.
// The data flow is Gaussian-centric: every Gaussian of the tile is fetched
// once and applied to all pixels it covers before the next.
//
// Rendering walks the list front to back (index 0 first), training back to
// front (index N-1 first). In rendering mode with hand-off enabled the unit
// stops early when the number of collapsed pixels reaches OCC_THRESH or when
// no more than TAIL_THRESH Gaussians remain; HANDOFF_IDX then tells software
// (or the pixel unit) where the tail starts. Gaussians may also be pushed
// through CSRs instead of being fetched from L2.
//
// CSR map (word address, 32-bit data, read data one cycle after the request):
//   0x00 CTRL   W  bit0 start, bit1 init pixel tile (T=1, C=0), bit2 clear done,
//                  bit3 stream the tile out on the pixel port
//   0x01 MODE   RW bit0 training, bit1 hand-off enable, bit2 CSR-push source
//   0x02 STATUS R  bit0 busy, bit1 done, bit2 handed off, bit3 streaming
//   0x03 TILE_X, 0x04 TILE_Y   tile origin in screen pixels
//   0x05 G_BASE  L2 address of record 0 (one record per address)
//   0x06 G_COUNT number of Gaussians in the tile's list
//   0x07 OCC_THRESH, 0x08 TAIL_THRESH
//   0x09-0x0B BG_R/G/B   background colour (training)
//   0x0C HANDOFF_IDX R, 0x0D OCC_COUNT R, 0x0E CULL_COUNT R, 0x0F STALL_COUNT R
//   0x10 PIX_XY  W  x in [5:0], y in [13:8]
//   0x18-0x1F PIX_WORD0-7  RW one word of the addressed pixel
//   0x20-0x2B GSTAGE0-11   W  staging words of a Gaussian record (word 0 = LSBs)
//   0x2C GPUSH   W  push the staged record into the Gaussian buffer
// The map, the L2 port (one whole record per response) and the stop rules'
// exact form are this design's; the paper says only that the rasterizer is
// configured and driven through memory-mapped CSRs.
module gaussian_rasterizer
  import vorion_pkg::*;
#(
  parameter int unsigned GBUF_DEPTH = 32,
  parameter int unsigned LANES      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // CSR port (from the raster agent)
  input  logic        csr_req,
  input  logic        csr_we,
  input  logic [7:0]  csr_addr,
  input  logic [31:0] csr_wdata,
  output logic        csr_rvalid,
  output logic [31:0] csr_rdata,
  // L2 interface
  output logic        l2_req_valid,
  output logic [31:0] l2_req_addr,
  input  logic        l2_req_ready,
  input  logic        l2_rsp_valid,
  input  gauss_t      l2_rsp_data,
  // gradient records (training)
  output logic        grad_valid,
  output grad_t       grad,
  input  logic        grad_hold,
  // tile stream-out
  output logic        pix_valid,
  output logic [15:0] pix_x,
  output logic [15:0] pix_y,
  output rpix_t       pix_data,
  input  logic        pix_ready,
  // status
  output logic        done,
  output logic        handed_off,
  output logic [31:0] handoff_idx
);
  localparam int unsigned GW = (GAUSS_W + 31) / 32;

  // ------------------------------------------------------------ registers
  mode_e       mode;
  logic        ho_en, push_src;
  logic [15:0] tile_x, tile_y;
  logic [31:0] g_base, g_count, occ_th, tail_th;
  f32_t [2:0]  bg;
  logic [31:0] occ_cnt, cull_cnt, stall_cnt;
  logic [5:0]  pix_ax, pix_ay;
  logic [GW*32-1:0] gstage;

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_RUN, S_DRAIN, S_STREAM} state_e;
  state_e state;

  // ------------------------------------------------------------ Gaussian buffer
  logic   gb_push, gb_pop, gb_empty, gb_full, gb_flush;
  gauss_t gb_in, gb_head;
  logic [$clog2(GBUF_DEPTH):0] gb_count;
  gaussian_buffer #(.DEPTH(GBUF_DEPTH)) u_gbuf (
    .clk, .rst_n, .flush(gb_flush), .push(gb_push), .push_data(gb_in), .pop(gb_pop),
    .head(gb_head), .empty(gb_empty), .full(gb_full), .count(gb_count)
  );

  // ------------------------------------------------------------ fetch engine
  logic [31:0] fetched, dispatched, outstanding;
  logic        stop_req;
  logic        csr_push;
  logic        l2_fire;
  assign l2_fire      = l2_req_valid && l2_req_ready;
  assign l2_req_valid = (state == S_RUN) && !push_src && !stop_req && (fetched < g_count) &&
                        (32'(gb_count) + outstanding < 32'(GBUF_DEPTH));
  assign l2_req_addr  = g_base + ((mode == MODE_RENDER) ? fetched : (g_count - 32'd1 - fetched));
  assign gb_push      = (l2_rsp_valid && state == S_RUN && !stop_req) || csr_push;
  assign gb_in        = csr_push ? gauss_t'(gstage[GAUSS_W-1:0]) : l2_rsp_data;
  assign gb_flush     = (state == S_DRAIN) || (state == S_IDLE && !push_src);

  // ------------------------------------------------------------ dispatch
  logic        t_valid, t_last, d_culled, d_stalled, d_idle;
  logic [5:0]  t_y;
  logic [2:0]  t_xg;
  logic [15:0] t_mask;
  gauss_t      t_g;
  logic        d_gvalid;
  assign d_gvalid = !gb_empty && (state == S_RUN) && !stop_req;
  dispatch_unit u_disp (
    .clk, .rst_n, .mode, .tile_x, .tile_y, .hold(grad_hold),
    .g_valid(d_gvalid), .g_in(gb_head), .g_pop(gb_pop),
    .t_valid, .t_y, .t_xg, .t_mask, .t_last, .t_g,
    .culled(d_culled), .stalled(d_stalled), .idle(d_idle)
  );

  // ------------------------------------------------------------ pixel buffer
  logic                 pb_rd_en, pb_wr_en, acc_en, acc_we;
  logic [5:0]           pb_rd_y, pb_wr_y, acc_x, acc_y;
  logic [2:0]           pb_rd_xg, pb_wr_xg, acc_word;
  logic [15:0]          pb_wr_mask;
  logic [15:0][127:0]   pb_rd_data, pb_wr_data;
  f32_t                 acc_wdata, acc_rdata;
  pixel_buffer u_pbuf (
    .clk, .mode,
    .rd_en(pb_rd_en), .rd_y(pb_rd_y), .rd_xg(pb_rd_xg), .rd_data(pb_rd_data),
    .wr_en(pb_wr_en), .wr_y(pb_wr_y), .wr_xg(pb_wr_xg), .wr_mask(pb_wr_mask),
    .wr_data(pb_wr_data),
    .acc_en, .acc_we, .acc_x, .acc_y, .acc_word, .acc_wdata, .acc_rdata
  );

  // token after the pixel-buffer read
  typedef struct packed {
    logic        v;
    logic [5:0]  y;
    logic [2:0]  xg;
    logic [15:0] mask;
    logic        last;
    gtag_t       tag;
  } tok_t;
  tok_t tk_rd;
  gauss_t g_rd;
  tok_t [4:0] tk_dl;  // tk_dl[k] = tk_rd delayed k+1 cycles
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tk_rd <= '0;
      tk_dl <= '0;
    end else begin
      tk_rd <= '{v: t_valid, y: t_y, xg: t_xg, mask: t_mask, last: t_last, tag: t_g.tag};
      tk_dl <= {tk_dl[3:0], tk_rd};
    end
  end
  always_ff @(posedge clk) g_rd <= t_g;

  // ------------------------------------------------------------ lanes
  rpix_t [15:0]     r_pix;
  logic  [15:0]     r_coll, r_ov;
  tpix_t [7:0]      p_pix;
  f32_t  [7:0][2:0] p_dc;
  f32_t  [7:0]      p_da;
  logic  [7:0]      p_ov;
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    raster_lane u_lane (
      .clk, .rst_n,
      .in_valid(tk_rd.v && mode == MODE_RENDER),
      .px(tile_x + 16'({tk_rd.xg[1:0], 4'(l)})), .py(tile_y + 16'(tk_rd.y)),
      .g(g_rd), .pix_in(rpix_t'(pb_rd_data[l])),
      .out_valid(r_ov[l]), .pix_out(r_pix[l]), .collapsed(r_coll[l])
    );
  end
  for (genvar p = 0; p < LANES / 2; p++) begin : g_pair
    grad_lane_pair u_pair (
      .clk, .rst_n,
      .in_valid(tk_rd.v && mode == MODE_TRAIN),
      .px(tile_x + 16'({tk_rd.xg, 3'(p)})), .py(tile_y + 16'(tk_rd.y)),
      .g(g_rd), .pix_in(tpix_t'({pb_rd_data[2*p], pb_rd_data[2*p+1]})), .bg,
      .out_valid(p_ov[p]), .pix_out(p_pix[p]), .dl_dc(p_dc[p]), .dl_da(p_da[p])
    );
  end

  // ------------------------------------------------------------ gather
  tok_t        tk_end;
  logic        g_wr_en;
  logic [5:0]  g_wr_y;
  logic [2:0]  g_wr_xg;
  logic [15:0] g_wr_mask;
  logic [15:0][127:0] g_wr_data;
  logic [4:0]  n_coll;
  assign tk_end = (mode == MODE_RENDER) ? tk_dl[2] : tk_dl[4];
  gather_unit u_gather (
    .clk, .rst_n, .mode,
    .t_valid(tk_end.v), .t_y(tk_end.y), .t_xg(tk_end.xg), .t_mask(tk_end.mask),
    .t_last(tk_end.last), .t_tag(tk_end.tag),
    .r_pix, .r_coll, .p_pix, .p_dc, .p_da,
    .wr_en(g_wr_en), .wr_y(g_wr_y), .wr_xg(g_wr_xg), .wr_mask(g_wr_mask), .wr_data(g_wr_data),
    .n_collapsed(n_coll), .grad_valid, .grad
  );

  // ------------------------------------------------------------ init / stream
  logic [8:0]  seq;          // init and stream group counter (y, xg)
  logic [3:0]  st_idx;       // pixel within the staged group
  logic        st_full, st_rd_pending;
  rpix_t [15:0] st_data;
  logic [7:0]  st_grp;
  logic        seq_done;

  rpix_t init_pix;
  assign init_pix = '{t: F_ONE, c: '0};

  always_comb begin
    pb_rd_en   = t_valid;
    pb_rd_y    = t_y;
    pb_rd_xg   = t_xg;
    pb_wr_en   = g_wr_en;
    pb_wr_y    = g_wr_y;
    pb_wr_xg   = g_wr_xg;
    pb_wr_mask = g_wr_mask;
    pb_wr_data = g_wr_data;
    if (state == S_INIT) begin
      pb_wr_en   = 1'b1;
      pb_wr_y    = seq[7:2];
      pb_wr_xg   = {1'b0, seq[1:0]};
      pb_wr_mask = '1;
      for (int l = 0; l < 16; l++) pb_wr_data[l] = init_pix;
    end
    if (state == S_STREAM) begin
      pb_rd_en = !st_full && !st_rd_pending && !seq_done;
      pb_rd_y  = seq[7:2];
      pb_rd_xg = {1'b0, seq[1:0]};
    end
  end

  assign pix_valid = (state == S_STREAM) && st_full;
  assign pix_data  = st_data[st_idx];
  assign pix_x     = tile_x + 16'({st_grp[1:0], st_idx});
  assign pix_y     = tile_y + 16'(st_grp[7:2]);

  // ------------------------------------------------------------ CSR access
  logic csr_rd_pix_q;
  logic [31:0] csr_rdata_q;
  always_comb begin
    acc_en    = csr_req && (csr_addr[7:3] == 5'b00011) && (state == S_IDLE);
    acc_we    = csr_we;
    acc_x     = pix_ax;
    acc_y     = pix_ay;
    acc_word  = csr_addr[2:0];
    acc_wdata = csr_wdata;
    csr_push  = csr_req && csr_we && csr_addr == 8'h2C;
  end
  assign csr_rdata = csr_rd_pix_q ? acc_rdata : csr_rdata_q;

  // stop rules (rendering hand-off)
  assign stop_req = (state == S_RUN) && (mode == MODE_RENDER) && ho_en &&
                    ((occ_cnt >= occ_th) || (g_count - dispatched <= tail_th));

  logic pipe_empty;
  always_comb begin
    pipe_empty = d_idle && !tk_rd.v;
    for (int k = 0; k < 5; k++) if (tk_dl[k].v) pipe_empty = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= MODE_RENDER; ho_en <= 1'b0; push_src <= 1'b0;
      tile_x <= '0; tile_y <= '0; g_base <= '0; g_count <= '0;
      occ_th <= '1; tail_th <= '0; bg <= '0;
      occ_cnt <= '0; cull_cnt <= '0; stall_cnt <= '0;
      pix_ax <= '0; pix_ay <= '0; gstage <= '0;
      state <= S_IDLE; done <= 1'b0; handed_off <= 1'b0; handoff_idx <= '0;
      fetched <= '0; dispatched <= '0; outstanding <= '0;
      seq <= '0; st_idx <= '0; st_full <= 1'b0; st_rd_pending <= 1'b0; st_data <= '0;
      st_grp <= '0; seq_done <= 1'b0;
      csr_rvalid <= 1'b0; csr_rdata_q <= '0; csr_rd_pix_q <= 1'b0;
    end else begin
      // ---- CSR
      csr_rvalid   <= csr_req && !csr_we;
      csr_rd_pix_q <= csr_req && !csr_we && (csr_addr[7:3] == 5'b00011);
      if (csr_req && !csr_we) begin
        unique case (csr_addr)
          8'h01: csr_rdata_q <= {29'd0, push_src, ho_en, mode};
          8'h02: csr_rdata_q <= {28'd0, state == S_STREAM, handed_off, done, state != S_IDLE};
          8'h03: csr_rdata_q <= {16'd0, tile_x};
          8'h04: csr_rdata_q <= {16'd0, tile_y};
          8'h05: csr_rdata_q <= g_base;
          8'h06: csr_rdata_q <= g_count;
          8'h0C: csr_rdata_q <= handoff_idx;
          8'h0D: csr_rdata_q <= occ_cnt;
          8'h0E: csr_rdata_q <= cull_cnt;
          8'h0F: csr_rdata_q <= stall_cnt;
          default: csr_rdata_q <= '0;
        endcase
      end
      if (csr_req && csr_we) begin
        unique case (csr_addr)
          8'h01: begin mode <= mode_e'(csr_wdata[0]); ho_en <= csr_wdata[1]; push_src <= csr_wdata[2]; end
          8'h03: tile_x  <= csr_wdata[15:0];
          8'h04: tile_y  <= csr_wdata[15:0];
          8'h05: g_base  <= csr_wdata;
          8'h06: g_count <= csr_wdata;
          8'h07: occ_th  <= csr_wdata;
          8'h08: tail_th <= csr_wdata;
          8'h09: bg[0]   <= csr_wdata;
          8'h0A: bg[1]   <= csr_wdata;
          8'h0B: bg[2]   <= csr_wdata;
          8'h10: begin pix_ax <= csr_wdata[5:0]; pix_ay <= csr_wdata[13:8]; end
          default: ;
        endcase
        if (csr_addr >= 8'h20 && csr_addr < 8'h20 + 8'(GW))
          gstage[(csr_addr - 8'h20)*32 +: 32] <= csr_wdata;
      end

      // ---- statistics
      if (d_culled)  cull_cnt  <= cull_cnt + 1'b1;
      if (d_stalled) stall_cnt <= stall_cnt + 1'b1;
      if (state == S_RUN || state == S_DRAIN) occ_cnt <= occ_cnt + 32'(n_coll);
      if (gb_pop) dispatched <= dispatched + 1'b1;
      if (l2_fire) begin
        fetched <= fetched + 1'b1;
        outstanding <= outstanding + 1'b1 - 32'(l2_rsp_valid);
      end else if (l2_rsp_valid) begin
        outstanding <= outstanding - 1'b1;
      end

      // ---- top control
      unique case (state)
        S_IDLE: begin
          if (csr_req && csr_we && csr_addr == 8'h00) begin
            if (csr_wdata[2]) begin done <= 1'b0; handed_off <= 1'b0; end
            if (csr_wdata[1]) begin
              state <= S_INIT; seq <= '0;
            end else if (csr_wdata[0]) begin
              state <= S_RUN; done <= 1'b0; handed_off <= 1'b0;
              fetched <= '0; dispatched <= '0; occ_cnt <= '0; cull_cnt <= '0; stall_cnt <= '0;
            end else if (csr_wdata[3]) begin
              state <= S_STREAM; seq <= '0; seq_done <= 1'b0;
              st_full <= 1'b0; st_rd_pending <= 1'b0;
            end
          end
        end
        S_INIT: begin
          seq <= seq + 1'b1;
          if (seq == 9'd255) state <= S_IDLE;
        end
        S_RUN: begin
          if (stop_req) begin
            state <= S_DRAIN;
            handed_off  <= 1'b1;
            handoff_idx <= dispatched + 32'(gb_pop);
          end else if (dispatched == g_count && pipe_empty && gb_empty) begin
            state <= S_DRAIN;
            handoff_idx <= g_count;
          end
        end
        S_DRAIN: begin
          if (pipe_empty && outstanding == 0 && !grad_valid) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_STREAM: begin
          if (pb_rd_en) begin
            st_rd_pending <= 1'b1;
            st_grp <= seq[7:0];
            seq    <= seq + 1'b1;
            if (seq == 9'd255) seq_done <= 1'b1;
          end
          if (st_rd_pending) begin
            st_rd_pending <= 1'b0;
            st_full <= 1'b1;
            st_idx  <= '0;
            for (int l = 0; l < 16; l++) st_data[l] <= rpix_t'(pb_rd_data[l]);
          end
          if (pix_valid && pix_ready) begin
            st_idx <= st_idx + 1'b1;
            if (st_idx == 4'd15) begin
              st_full <= 1'b0;
              if (seq_done) state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rule: a pushed record must find room in the Gaussian buffer.
  a_push_room: assert property (@(posedge clk) disable iff (!rst_n) !(gb_push && gb_full));
endmodule
