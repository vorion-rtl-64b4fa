// tb_gaussian_buffer: random push/pop traffic on the Gaussian buffer against
// a queue model: order, show-ahead head, count, full and empty flags, and
// flush.
module tb_gaussian_buffer;
  import vorion_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic   flush, push, pop, empty, full;
  gauss_t push_data, head;
  logic [5:0] count;
  gaussian_buffer #(.DEPTH(32)) dut (.*);
  gauss_t q[$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nfull = 0;
    flush = 0; push = 0; pop = 0; push_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      checks++;
      if (count != 6'(q.size()) || empty != (q.size() == 0) || full != (q.size() == 32)) begin
        failures++; $display("FAIL flags %0d %0d", count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (head !== q[0]) begin failures++; $display("FAIL head"); end
      end
      if (full) nfull++;
      flush = (i % 1000 == 999);
      push  = !full && ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 30));
      pop   = !empty && ($urandom_range(0, 99) < 50);
      for (int w = 0; w < GAUSS_WORDS; w++) push_data[w*32 +: 32] = $urandom;
      @(posedge clk);
      if (flush) q = {};
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(push_data);
      end
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
