// raster_agent: the bridge between the SIMT cores of a socket and their
// Gaussian rasterizer. Cores reach the rasterizer only through CSR accesses;
// the agent forwards them and collects the training gradients that come back.
//
// CSR window seen by each core (12-bit CSR address):
//   0x800-0x8FF  forwarded to rasterizer CSR (low 8 bits)
//   0x900 GRAD_STATUS R  bit0 block ready, bits[15:8] records held,
//                        bits[31:16] blocks delivered
//   0x901 GRAD_SEL    W  record index within the current block (0-15)
//   0x902 GRAD_TAG    R  tag of the selected record
//   0x903-0x905 GRAD_DC R dL/dc R,G,B of the selected record
//   0x906 GRAD_DA     R  dL/dalpha of the selected record
//   0x907 GRAD_RELEASE W  retire the current block
// Gradient records from the gather unit enter a 32-entry FIFO. A block is
// ready when 16 records (one block of 16 Gaussians, as in the paper) are
// held, or when the rasterizer has finished with fewer; the block-ready
// interrupt then tells the cores to read it and compute the remaining
// gradients (Sigma, o, mu). RELEASE drops the block. The rasterizer is held
// (no new pixel groups) while fewer than 8 FIFO entries are free, enough for
// the records still in its pipeline.
//
// The 16-Gaussian block follows the paper. Putting one agent per socket with
// a port per core (fixed priority, core 0 first, one access per cycle), the
// address window and the FIFO are this design's choices; the paper places a
// small agent in each core and does not describe its interface.
// Timing: a granted access (core_gnt) returns read data on the next cycle.
module raster_agent
  import vorion_pkg::*;
#(
  parameter int unsigned NCORES = 4,
  parameter int unsigned BLOCK  = 16,
  parameter int unsigned FIFO   = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // cores
  input  logic [NCORES-1:0]       core_req,
  input  logic [NCORES-1:0]       core_we,
  input  logic [NCORES-1:0][11:0] core_addr,
  input  logic [NCORES-1:0][31:0] core_wdata,
  output logic [NCORES-1:0]       core_gnt,
  output logic [NCORES-1:0]       core_rvalid,
  output logic [31:0]             core_rdata,
  output logic                    block_irq,
  // rasterizer
  output logic                    r_req,
  output logic                    r_we,
  output logic [7:0]              r_addr,
  output logic [31:0]             r_wdata,
  input  logic                    r_rvalid,
  input  logic [31:0]             r_rdata,
  input  logic                    grad_valid,
  input  grad_t                   grad,
  output logic                    grad_hold,
  input  logic                    r_done
);
  localparam int unsigned FW = $clog2(FIFO);

  grad_t       fifo [FIFO];
  logic [FW-1:0] wp, rp;
  logic [FW:0]   cnt;
  logic [15:0]   blocks;
  logic [3:0]    sel;

  // arbitration
  logic [$clog2(NCORES)-1:0] g;
  logic                      any;
  always_comb begin
    any = 1'b0; g = '0; core_gnt = '0;
    for (int c = NCORES - 1; c >= 0; c--)
      if (core_req[c]) begin any = 1'b1; g = c[$clog2(NCORES)-1:0]; end
    if (any) core_gnt[g] = 1'b1;
  end

  logic        win_r;
  logic [11:0] a;
  logic        we;
  assign a     = core_addr[g];
  assign we    = core_we[g];
  assign win_r = a[11:8] == 4'h8;
  assign r_req   = any && win_r;
  assign r_we    = we;
  assign r_addr  = a[7:0];
  assign r_wdata = core_wdata[g];

  logic [FW:0] blk_n;
  logic        blk_ready;
  assign blk_n     = (cnt >= (FW+1)'(BLOCK)) ? (FW+1)'(BLOCK) : cnt;
  assign blk_ready = (cnt >= (FW+1)'(BLOCK)) || (r_done && cnt != '0);
  assign block_irq = blk_ready;
  assign grad_hold = (cnt > (FW+1)'(FIFO - 8));

  logic        release_blk;
  assign release_blk = any && we && a == 12'h907 && blk_ready;

  grad_t sel_rec;
  assign sel_rec = fifo[FW'(rp + FW'(sel))];

  logic [NCORES-1:0] rv_q;
  logic              own_q;
  logic [31:0]       own_data_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; blocks <= '0; sel <= '0;
      rv_q <= '0; own_q <= 1'b0; own_data_q <= '0;
    end else begin
      if (grad_valid) begin
        fifo[wp] <= grad;
        wp <= wp + 1'b1;
      end
      cnt <= cnt + (FW+1)'(grad_valid) - (release_blk ? blk_n : '0);
      if (release_blk) begin
        rp     <= rp + FW'(blk_n);
        blocks <= blocks + 1'b1;
      end
      rv_q  <= core_gnt & ~core_we;
      own_q <= any && !we && !win_r;
      if (any && we && a == 12'h901) sel <= core_wdata[g][3:0];
      unique case (a)
        12'h900: own_data_q <= {blocks, 8'(cnt), 7'd0, blk_ready};
        12'h902: own_data_q <= {16'd0, sel_rec.tag};
        12'h903: own_data_q <= sel_rec.dl_dc[0];
        12'h904: own_data_q <= sel_rec.dl_dc[1];
        12'h905: own_data_q <= sel_rec.dl_dc[2];
        12'h906: own_data_q <= sel_rec.dl_da;
        default: own_data_q <= '0;
      endcase
    end
  end
  assign core_rvalid = rv_q;
  assign core_rdata  = own_q ? own_data_q : r_rdata;

  a_no_fifo_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                       !(grad_valid && cnt == (FW+1)'(FIFO)));
  a_rvalid_match: assert property (@(posedge clk) disable iff (!rst_n)
                                   (rv_q != '0 && !own_q) |-> r_rvalid);
endmodule
