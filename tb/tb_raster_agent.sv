// tb_raster_agent: exercises the socket's raster agent with four cores and a
// stand-in rasterizer CSR (answers a read one cycle later with a value derived
// from the address and records writes). Checks forwarding of reads and
// writes, fixed-priority arbitration when several cores request at once,
// gradient collection into 16-record blocks (block-ready interrupt, record
// readout through GRAD_SEL/GRAD_*, RELEASE), the hold signal when the FIFO
// fills, and release of a partial block once the rasterizer reports done.
module tb_raster_agent;
  import vorion_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] core_req, core_we, core_gnt, core_rvalid;
  logic [3:0][11:0] core_addr;
  logic [3:0][31:0] core_wdata;
  logic [31:0] core_rdata, r_wdata, r_rdata;
  logic block_irq, r_req, r_we, r_rvalid, grad_valid, grad_hold, r_done;
  logic [7:0] r_addr;
  grad_t grad;
  raster_agent #(.NCORES(4)) dut (.*);

  // stand-in rasterizer CSR
  logic [31:0] regs [256];
  always @(posedge clk) begin
    r_rvalid <= r_req && !r_we;
    r_rdata  <= {24'hA5A5A5, r_addr} ^ regs[r_addr];
    if (r_req && r_we) regs[r_addr] <= r_wdata;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic access(input int c, input bit we, input logic [11:0] a, input logic [31:0] d,
                        output logic [31:0] rd);
    @(negedge clk);
    core_req[c] = 1; core_we[c] = we; core_addr[c] = a; core_wdata[c] = d;
    @(posedge clk);
    while (!core_gnt[c]) @(posedge clk);
    @(negedge clk);
    core_req[c] = 0;
    rd = core_rdata;
  endtask

  grad_t sent[$];
  int    nsent = 0;
  task automatic push_grads(input int n);
    for (int i = 0; i < n; i++) begin
      grad_t g;
      @(negedge clk);
      g.tag = '{xtile: 1'b0, id: 15'(nsent)};
      for (int ch = 0; ch < 3; ch++) g.dl_dc[ch] = $urandom;
      g.dl_da = $urandom;
      grad_valid = 1; grad = g;
      sent.push_back(g);
      nsent++;
      @(negedge clk);
      grad_valid = 0;
    end
  endtask

  task automatic read_block(input int n);
    logic [31:0] v;
    for (int k = 0; k < n; k++) begin
      grad_t e;
      e = sent.pop_front();
      access(k % 4, 1, 12'h901, k, v);
      access((k + 1) % 4, 0, 12'h902, 0, v);
      checks++;
      if (v[15:0] != e.tag) begin failures++; $display("FAIL tag %0d exp %0d", v[15:0], e.tag.id); end
      access(k % 4, 0, 12'h903, 0, v);
      checks++; if (v != e.dl_dc[0]) begin failures++; $display("FAIL dc0"); end
      access(k % 4, 0, 12'h905, 0, v);
      checks++; if (v != e.dl_dc[2]) begin failures++; $display("FAIL dc2"); end
      access(k % 4, 0, 12'h906, 0, v);
      checks++; if (v != e.dl_da) begin failures++; $display("FAIL da"); end
    end
    access(0, 1, 12'h907, 0, v);
  endtask

  initial begin
    logic [31:0] v;
    core_req = 0; core_we = 0; core_addr = '0; core_wdata = '0; grad_valid = 0; grad = '0; r_done = 0;
    for (int i = 0; i < 256; i++) regs[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // forwarding
    for (int i = 0; i < 40; i++) begin
      int c;
      logic [7:0] a;
      logic [31:0] d;
      c = $urandom_range(0, 3); a = 8'($urandom); d = $urandom;
      access(c, 1, {4'h8, a}, d, v);
      access((c + 1) % 4, 0, {4'h8, a}, 0, v);
      checks++;
      if (v != ({24'hA5A5A5, a} ^ d)) begin failures++; $display("FAIL forward read"); end
    end
    // arbitration: all four request at once, grants in order 0,1,2,3
    @(negedge clk);
    core_req = 4'hF; core_we = 4'h0;
    for (int c = 0; c < 4; c++) core_addr[c] = {4'h8, 8'(c)};
    for (int c = 0; c < 4; c++) begin
      @(posedge clk); #1;
      checks++;
      if (core_gnt != 4'(1 << c)) begin failures++; $display("FAIL grant %b", core_gnt); end
      @(negedge clk);
      core_req[c] = 0;
    end
    // gradients: 16 records -> block ready
    push_grads(15);
    repeat (2) @(posedge clk);
    checks++; if (block_irq) begin failures++; $display("FAIL early irq"); end
    push_grads(1);
    repeat (2) @(posedge clk);
    checks++; if (!block_irq) begin failures++; $display("FAIL no irq"); end
    // fill until hold
    push_grads(9);
    repeat (2) @(posedge clk);
    checks++; if (!grad_hold) begin failures++; $display("FAIL no hold at 25 records"); end
    read_block(16);
    repeat (2) @(posedge clk);
    checks++; if (grad_hold || block_irq) begin failures++; $display("FAIL after release"); end
    // partial block on done
    r_done = 1;
    repeat (2) @(posedge clk);
    checks++; if (!block_irq) begin failures++; $display("FAIL no partial block"); end
    access(2, 0, 12'h900, 0, v);
    checks++; if (v[15:8] != 8'd9 || v[31:16] != 16'd1) begin failures++; $display("FAIL status %h", v); end
    read_block(9);
    repeat (2) @(posedge clk);
    checks++; if (block_irq) begin failures++; $display("FAIL irq after last block"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
