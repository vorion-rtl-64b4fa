// vorion_top: the Gaussian-rendering part of the Vorion prototype chip - two
// sockets, each with a Gaussian rasterizer and the raster agent through
// which its four SIMT cores drive it, plus the cluster's pixel unit.
//
// The SIMT cores, caches, shared memory, L2 and the command processor are
// not part of this RTL; their connections are the top's ports:
//  * core_*: the CSR accesses of the NSOCKETS x NCORES cores (12-bit CSR
//    address, see raster_agent), with grant, read data and the per-socket
//    gradient-block interrupt;
//  * l2_*: one L2 request/response port per socket rasterizer (index s) and
//    one for the pixel unit (index NSOCKETS), one Gaussian record per
//    response;
//  * pu_csr_*: the pixel unit's configuration port (command processor);
//  * fb_*: each socket's tile stream-out (the frame-buffer path), and pu_*
//    the pixel unit's output.
// With pu_en set, the stream of socket pu_sel goes through the pixel unit,
// which finishes the pixels still open after a hand-off (hybrid
// Gaussian-/pixel-centric mode); otherwise every stream leaves on fb_*.
// This fixed routing is this design's choice; the paper only states that
// the tail of a tile is offloaded to the pixel unit.
module vorion_top
  import vorion_pkg::*;
#(
  parameter int unsigned NSOCKETS = 2,
  parameter int unsigned NCORES   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // cores
  input  logic [NSOCKETS-1:0][NCORES-1:0]       core_req,
  input  logic [NSOCKETS-1:0][NCORES-1:0]       core_we,
  input  logic [NSOCKETS-1:0][NCORES-1:0][11:0] core_addr,
  input  logic [NSOCKETS-1:0][NCORES-1:0][31:0] core_wdata,
  output logic [NSOCKETS-1:0][NCORES-1:0]       core_gnt,
  output logic [NSOCKETS-1:0][NCORES-1:0]       core_rvalid,
  output logic [NSOCKETS-1:0][31:0]             core_rdata,
  output logic [NSOCKETS-1:0]                   block_irq,
  // L2 ports: 0..NSOCKETS-1 rasterizers, NSOCKETS pixel unit
  output logic   [NSOCKETS:0]       l2_req_valid,
  output logic   [NSOCKETS:0][31:0] l2_req_addr,
  input  logic   [NSOCKETS:0]       l2_req_ready,
  input  logic   [NSOCKETS:0]       l2_rsp_valid,
  input  gauss_t [NSOCKETS:0]       l2_rsp_data,
  // pixel unit configuration
  input  logic        pu_csr_req,
  input  logic        pu_csr_we,
  input  logic [3:0]  pu_csr_addr,
  input  logic [31:0] pu_csr_wdata,
  output logic        pu_csr_rvalid,
  output logic [31:0] pu_csr_rdata,
  input  logic        pu_en,
  input  logic [$clog2(NSOCKETS)-1:0] pu_sel,
  // frame-buffer streams
  output logic  [NSOCKETS-1:0]       fb_valid,
  output logic  [NSOCKETS-1:0][15:0] fb_x,
  output logic  [NSOCKETS-1:0][15:0] fb_y,
  output rpix_t [NSOCKETS-1:0]       fb_pix,
  input  logic  [NSOCKETS-1:0]       fb_ready,
  output logic        pu_valid,
  output logic [15:0] pu_x,
  output logic [15:0] pu_y,
  output rpix_t       pu_pix,
  input  logic        pu_ready,
  // status
  output logic [NSOCKETS-1:0]        r_done,
  output logic [NSOCKETS-1:0]        r_handed_off,
  output logic [NSOCKETS-1:0][31:0]  r_handoff_idx
);
  logic  [NSOCKETS-1:0]       s_valid, s_ready;
  logic  [NSOCKETS-1:0][15:0] s_x, s_y;
  rpix_t [NSOCKETS-1:0]       s_pix;

  for (genvar s = 0; s < NSOCKETS; s++) begin : g_socket
    logic        r_req, r_we, r_rvalid, grad_valid, grad_hold;
    logic [7:0]  r_addr;
    logic [31:0] r_wdata, r_rdata;
    grad_t       grad;

    raster_agent #(.NCORES(NCORES)) u_agent (
      .clk, .rst_n,
      .core_req(core_req[s]), .core_we(core_we[s]), .core_addr(core_addr[s]),
      .core_wdata(core_wdata[s]), .core_gnt(core_gnt[s]), .core_rvalid(core_rvalid[s]),
      .core_rdata(core_rdata[s]), .block_irq(block_irq[s]),
      .r_req, .r_we, .r_addr, .r_wdata, .r_rvalid, .r_rdata,
      .grad_valid, .grad, .grad_hold, .r_done(r_done[s])
    );

    gaussian_rasterizer u_rast (
      .clk, .rst_n,
      .csr_req(r_req), .csr_we(r_we), .csr_addr(r_addr), .csr_wdata(r_wdata),
      .csr_rvalid(r_rvalid), .csr_rdata(r_rdata),
      .l2_req_valid(l2_req_valid[s]), .l2_req_addr(l2_req_addr[s]),
      .l2_req_ready(l2_req_ready[s]), .l2_rsp_valid(l2_rsp_valid[s]),
      .l2_rsp_data(l2_rsp_data[s]),
      .grad_valid, .grad, .grad_hold,
      .pix_valid(s_valid[s]), .pix_x(s_x[s]), .pix_y(s_y[s]), .pix_data(s_pix[s]),
      .pix_ready(s_ready[s]),
      .done(r_done[s]), .handed_off(r_handed_off[s]), .handoff_idx(r_handoff_idx[s])
    );

    logic to_pu;
    assign to_pu       = pu_en && (pu_sel == s[$clog2(NSOCKETS)-1:0]);
    assign fb_valid[s] = s_valid[s] && !to_pu;
    assign fb_x[s]     = s_x[s];
    assign fb_y[s]     = s_y[s];
    assign fb_pix[s]   = s_pix[s];
  end

  logic pu_in_ready;
  always_comb begin
    for (int s = 0; s < NSOCKETS; s++)
      s_ready[s] = (pu_en && pu_sel == s[$clog2(NSOCKETS)-1:0]) ? pu_in_ready : fb_ready[s];
  end

  pixel_unit u_pu (
    .clk, .rst_n,
    .csr_req(pu_csr_req), .csr_we(pu_csr_we), .csr_addr(pu_csr_addr), .csr_wdata(pu_csr_wdata),
    .csr_rvalid(pu_csr_rvalid), .csr_rdata(pu_csr_rdata),
    .l2_req_valid(l2_req_valid[NSOCKETS]), .l2_req_addr(l2_req_addr[NSOCKETS]),
    .l2_req_ready(l2_req_ready[NSOCKETS]), .l2_rsp_valid(l2_rsp_valid[NSOCKETS]),
    .l2_rsp_data(l2_rsp_data[NSOCKETS]),
    .in_valid(pu_en && s_valid[pu_sel]), .in_ready(pu_in_ready),
    .in_x(s_x[pu_sel]), .in_y(s_y[pu_sel]), .in_pix(s_pix[pu_sel]),
    .out_valid(pu_valid), .out_ready(pu_ready), .out_x(pu_x), .out_y(pu_y), .out_pix(pu_pix)
  );
endmodule
