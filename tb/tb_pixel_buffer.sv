// tb_pixel_buffer: random traffic on the three ports of the pixel buffer in
// both modes, against a flat model of the tile (pixel x,y, word w):
// single-word writes and reads, masked group writes and group reads, whose
// lane order must match the row-group layout (rendering: lane L = pixel
// 16xg+L; training: lanes 2p/2p+1 = the two halves of pixel 8xg+p).
module tb_pixel_buffer;
  import vorion_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mode_e mode;
  logic rd_en, wr_en, acc_en, acc_we;
  logic [5:0] rd_y, wr_y, acc_x, acc_y;
  logic [2:0] rd_xg, wr_xg, acc_word;
  logic [15:0] wr_mask;
  logic [15:0][127:0] rd_data, wr_data;
  f32_t acc_wdata, acc_rdata;
  pixel_buffer dut (.*);

  logic [31:0] model [64][64][8];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // word w of lane l for group (y, xg) in the model
  function automatic logic [31:0] mword(input mode_e m, input int y, input int xg, input int l, input int w);
    if (m == MODE_RENDER) return model[16*xg + l][y][w];
    return model[8*xg + l/2][y][(l % 2 == 0) ? w : w + 4];
  endfunction

  task automatic run_mode(input mode_e m);
    int h, ngx, nw;
    mode = m;
    h   = (m == MODE_RENDER) ? 64 : 32;
    ngx = (m == MODE_RENDER) ? 4 : 8;
    nw  = (m == MODE_RENDER) ? 4 : 8;
    // fill through the access port
    for (int y = 0; y < h; y++)
      for (int x = 0; x < 64; x++)
        for (int w = 0; w < nw; w++) begin
          @(negedge clk);
          acc_en = 1; acc_we = 1; acc_x = 6'(x); acc_y = 6'(y); acc_word = 3'(w);
          acc_wdata = $urandom;
          model[x][y][w] = acc_wdata;
        end
    @(negedge clk); acc_en = 0;
    // staggered layout: pixel (x,y) sits in bank (x+y)%16 (rendering) or banks
    // 2((x+y)%8)+{0,1} (training)
    for (int k = 0; k < 200; k++) begin
      int x, y, w;
      x = $urandom_range(0, 63); y = $urandom_range(0, h - 1); w = $urandom_range(0, nw - 1);
      checks++;
      if (m == MODE_RENDER) begin
        if (dut.mem[(x + y) % 16][w][4*y + x/16] !== model[x][y][w]) failures++;
      end else begin
        if (dut.mem[2*((x + y) % 8) + w/4][w % 4][8*y + x/8] !== model[x][y][w]) failures++;
      end
    end
    // random group reads / masked group writes / single reads
    for (int i = 0; i < 3000; i++) begin
      int ry, rx, ax, ay, aw, wy, wx;
      logic [15:0][127:0] exp_rd;
      @(negedge clk);
      ry = $urandom_range(0, h - 1); rx = $urandom_range(0, ngx - 1);
      rd_en = 1; rd_y = 6'(ry); rd_xg = 3'(rx);
      for (int l = 0; l < 16; l++)
        for (int w = 0; w < 4; w++) exp_rd[l][w*32 +: 32] = mword(m, ry, rx, l, w);
      wy = $urandom_range(0, h - 1); wx = $urandom_range(0, ngx - 1);
      if (wy == ry && wx == rx) wy = (wy + 1) % h;
      wr_en = 1; wr_y = 6'(wy); wr_xg = 3'(wx); wr_mask = 16'($urandom);
      for (int l = 0; l < 16; l++) begin
        for (int w = 0; w < 4; w++) wr_data[l][w*32 +: 32] = $urandom;
      end
      @(posedge clk);
      for (int l = 0; l < 16; l++)
        if (wr_mask[l])
          for (int w = 0; w < 4; w++) begin
            if (m == MODE_RENDER) model[16*wx + l][wy][w] = wr_data[l][w*32 +: 32];
            else model[8*wx + l/2][wy][(l % 2 == 0) ? w : w + 4] = wr_data[l][w*32 +: 32];
          end
      #1;
      checks++;
      if (rd_data !== exp_rd) begin
        failures++;
        if (failures < 5) $display("FAIL group read mode %0d y %0d xg %0d", m, ry, rx);
      end
      // single-word read
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      ax = $urandom_range(0, 63); ay = $urandom_range(0, h - 1); aw = $urandom_range(0, nw - 1);
      acc_en = 1; acc_we = 0; acc_x = 6'(ax); acc_y = 6'(ay); acc_word = 3'(aw);
      @(posedge clk); #1;
      acc_en = 0;
      checks++;
      if (acc_rdata !== model[ax][ay][aw]) begin
        failures++;
        if (failures < 5) $display("FAIL word read %0d %0d %0d", ax, ay, aw);
      end
    end
  endtask

  initial begin
    rd_en = 0; wr_en = 0; acc_en = 0; acc_we = 0; rd_y = 0; rd_xg = 0; wr_y = 0; wr_xg = 0;
    acc_x = 0; acc_y = 0; acc_word = 0; acc_wdata = 0; wr_mask = 0; wr_data = '0;
    run_mode(MODE_RENDER);
    run_mode(MODE_TRAIN);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
