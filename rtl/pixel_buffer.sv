// pixel_buffer: the rasterizer's on-chip pixel tile store, 1R1W, split into
// 16 independent banks so that the 16 raster lanes each reach their own bank
// in every cycle.
//
// Capacity is one 64x64 rendering tile of four FP32 words per pixel
// (R,G,B,T): 16 banks x 256 entries x 128 bit. Training uses the same
// storage as a 64x32 tile of eight words per pixel, a pixel taking two
// neighbouring banks: the even bank holds {T, dL/dC}, the odd one
// {T_final, C_accum}.
//
// Staggered banking (this design's mapping; the paper states only that the
// layout is staggered): rendering pixel (x,y) lives in bank (x+y) mod 16,
// entry 4y + x/16; training pixel (x,y) in banks 2((x+y) mod 8) and +1, entry
// 8y + x/8. A row group of 16 (rendering) or 8 (training) aligned pixels then
// spans all banks at one entry, and vertically adjacent pixels also fall in
// different banks. The lane ports address a whole row group (y, xg) and
// see data in lane order; the buffer rotates lanes onto banks.
//
// Ports: a group read port (1-cycle latency), a group write port with a
// lane mask, and a single-word access port for loading and draining the tile
// (x, y, word 0-7; 1-cycle read latency). The access port takes priority on
// the banks it touches; the user keeps it from colliding with lane traffic.
module pixel_buffer
  import vorion_pkg::*;
#(
  parameter int unsigned BANKS = 16,
  parameter int unsigned DEPTH = 256
) (
  input  logic                 clk,
  input  mode_e                mode,
  // group read
  input  logic                 rd_en,
  input  logic [5:0]           rd_y,
  input  logic [2:0]           rd_xg,
  output logic [BANKS-1:0][127:0] rd_data,
  // group write
  input  logic                 wr_en,
  input  logic [5:0]           wr_y,
  input  logic [2:0]           wr_xg,
  input  logic [BANKS-1:0]     wr_mask,
  input  logic [BANKS-1:0][127:0] wr_data,
  // single-word access
  input  logic                 acc_en,
  input  logic                 acc_we,
  input  logic [5:0]           acc_x,
  input  logic [5:0]           acc_y,
  input  logic [2:0]           acc_word,
  input  f32_t                 acc_wdata,
  output f32_t                 acc_rdata
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned BW = $clog2(BANKS);

  logic [31:0] mem [BANKS][4][DEPTH];

  // group entry and bank rotation
  function automatic logic [AW-1:0] grp_entry(input mode_e m, input logic [5:0] y,
                                              input logic [2:0] xg);
    return (m == MODE_RENDER) ? AW'({y, xg[1:0]}) : AW'({y[4:0], xg});
  endfunction
  function automatic logic [BW-1:0] rot(input mode_e m, input logic [5:0] y);
    return (m == MODE_RENDER) ? BW'(y) : BW'({y, 1'b0});
  endfunction

  logic [BW-1:0] acc_bank;
  logic [AW-1:0] acc_entry;
  logic [1:0]    acc_w4;
  always_comb begin
    if (mode == MODE_RENDER) begin
      acc_bank  = BW'(acc_x + acc_y);
      acc_entry = AW'({acc_y, acc_x[5:4]});
      acc_w4    = acc_word[1:0];
    end else begin
      acc_bank  = BW'({3'(acc_x + acc_y), acc_word[2]});
      acc_entry = AW'({acc_y[4:0], acc_x[5:3]});
      acc_w4    = acc_word[1:0];
    end
  end

  logic [AW-1:0] r_entry, w_entry;
  logic [BW-1:0] r_rot, w_rot, r_rot_q;
  assign r_entry = grp_entry(mode, rd_y, rd_xg);
  assign w_entry = grp_entry(mode, wr_y, wr_xg);
  assign r_rot   = rot(mode, rd_y);
  assign w_rot   = rot(mode, wr_y);

  logic [BANKS-1:0][127:0] bank_q;
  logic [BW-1:0]           acc_bank_q;
  logic [1:0]              acc_w4_q;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    // lane feeding this bank: bank = (lane + rot) mod BANKS
    logic [BW-1:0] w_lane;
    assign w_lane = BW'(b) - w_rot;
    for (genvar w = 0; w < 4; w++) begin : g_word
      always_ff @(posedge clk) begin
        if (acc_en && acc_we && acc_bank == BW'(b) && acc_w4 == 2'(w))
          mem[b][w][acc_entry] <= acc_wdata;
        else if (wr_en && wr_mask[w_lane])
          mem[b][w][w_entry] <= wr_data[w_lane][w*32 +: 32];
      end
    end
    always_ff @(posedge clk) begin
      if (acc_en && !acc_we && acc_bank == BW'(b))
        for (int w = 0; w < 4; w++) bank_q[b][w*32 +: 32] <= mem[b][w][acc_entry];
      else if (rd_en)
        for (int w = 0; w < 4; w++) bank_q[b][w*32 +: 32] <= mem[b][w][r_entry];
    end
  end

  always_ff @(posedge clk) begin
    r_rot_q    <= r_rot;
    acc_bank_q <= acc_bank;
    acc_w4_q   <= acc_w4;
  end

  always_comb begin
    for (int l = 0; l < BANKS; l++) rd_data[l] = bank_q[BW'(BW'(l) + r_rot_q)];
    acc_rdata = bank_q[acc_bank_q][acc_w4_q*32 +: 32];
  end
endmodule
