// tb_gather_unit: drives the gather unit with random end-of-pipeline groups.
// Rendering: the write port must carry the lane results in lane order with
// the group's mask, and the collapse count must equal the masked collapse
// flags. Training: lane pairs are split into their two halves, and for each
// Gaussian (several groups, the last one flagged) the emitted gradient
// record must be the sum, over masked pairs of all its groups, of dL/dc and
// dL/dalpha (checked in double precision within 1e-5 relative).
module tb_gather_unit;
  import vorion_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mode_e mode;
  logic t_valid, t_last, wr_en, grad_valid;
  logic [5:0] t_y, wr_y;
  logic [2:0] t_xg, wr_xg;
  logic [15:0] t_mask, wr_mask, r_coll;
  gtag_t t_tag;
  rpix_t [15:0] r_pix;
  tpix_t [7:0] p_pix;
  f32_t [7:0][2:0] p_dc;
  f32_t [7:0] p_da;
  logic [15:0][127:0] wr_data;
  logic [4:0] n_collapsed;
  grad_t grad;
  gather_unit dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t_valid = 0; t_last = 0; t_y = 0; t_xg = 0; t_mask = 0; t_tag = '0; r_pix = '0; r_coll = 0;
    p_pix = '0; p_dc = '0; p_da = '0; mode = MODE_RENDER;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // rendering
    for (int i = 0; i < 500; i++) begin
      int nc;
      @(negedge clk);
      t_valid = $urandom_range(0, 3) != 0; t_y = 6'($urandom); t_xg = 3'($urandom_range(0, 3));
      t_mask = 16'($urandom); r_coll = 16'($urandom);
      for (int l = 0; l < 16; l++) for (int w = 0; w < 4; w++) r_pix[l][w*32 +: 32] = $urandom;
      #1;
      nc = 0;
      for (int l = 0; l < 16; l++) if (t_mask[l] && r_coll[l]) nc++;
      checks++;
      if (wr_en != (t_valid && t_mask != 0) || wr_mask != t_mask || wr_y != t_y || wr_xg != t_xg ||
          n_collapsed != 5'(t_valid ? nc : 0)) begin failures++; $display("FAIL render ctl"); end
      for (int l = 0; l < 16; l++) if (wr_data[l] !== r_pix[l]) begin failures++; $display("FAIL render data"); end
    end
    // training
    @(negedge clk);
    mode = MODE_TRAIN; t_valid = 0;
    for (int gi = 0; gi < 200; gi++) begin
      real sdc[3], sda;
      int  ngrp;
      sdc = '{0.0, 0.0, 0.0}; sda = 0.0;
      ngrp = $urandom_range(1, 6);
      for (int k = 0; k < ngrp; k++) begin
        @(negedge clk);
        t_valid = 1; t_last = (k == ngrp - 1); t_tag = '{xtile: 1'b1, id: 15'(gi)};
        t_y = 6'($urandom_range(0, 31)); t_xg = 3'($urandom);
        t_mask = '0;
        for (int p = 0; p < 8; p++) if ($urandom_range(0, 3) != 0) t_mask[2*p +: 2] = 2'b11;
        for (int p = 0; p < 8; p++) begin
          for (int w = 0; w < 8; w++) p_pix[p][w*32 +: 32] = $urandom;
          for (int ch = 0; ch < 3; ch++) begin
            p_dc[p][ch] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 997.0);
            if (t_mask[2*p]) sdc[ch] += f2r(p_dc[p][ch]);
          end
          p_da[p] = r2f((real'($urandom_range(0, 2000)) - 1000.0) / 991.0);
          if (t_mask[2*p]) sda += f2r(p_da[p]);
        end
        #1;
        checks++;
        for (int l = 0; l < 16; l++)
          if (wr_data[l] !== ((l % 2 == 0) ? p_pix[l/2][255:128] : p_pix[l/2][127:0])) begin
            failures++; $display("FAIL train data split");
          end
      end
      @(negedge clk);
      t_valid = 0;
      checks++;
      if (!grad_valid || grad.tag.id != 15'(gi) || !grad.tag.xtile) begin
        failures++; $display("FAIL grad record missing %0d", gi);
      end else begin
        for (int ch = 0; ch < 3; ch++)
          if (!close(f2r(grad.dl_dc[ch]), sdc[ch], 1e-5, 1e-5)) begin
            failures++; $display("FAIL dLdc %g %g", f2r(grad.dl_dc[ch]), sdc[ch]);
          end
        if (!close(f2r(grad.dl_da), sda, 1e-5, 1e-5)) begin failures++; $display("FAIL dLda"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
