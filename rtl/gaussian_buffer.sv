// gaussian_buffer: the rasterizer's small 1R1W Gaussian store. It is a FIFO
// of Gaussian records (mean, conic, opacity, colour, AABB, tag) filled from
// the L2 interface ahead of the dispatch unit, so that L2 latency is hidden
// while the lanes work on earlier Gaussians.
//
// Depth 32 records follows the training figure ("32 Gaus"); the same depth is
// used for rendering, where the paper gives no number. The head entry is
// visible combinationally (show-ahead); push and pop may happen in the same
// cycle. flush empties the buffer. Assertions check that nobody pushes into a
// full or pops from an empty buffer.
module gaussian_buffer
  import vorion_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   flush,
  input  logic   push,
  input  gauss_t push_data,
  input  logic   pop,
  output gauss_t head,
  output logic   empty,
  output logic   full,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  gauss_t        mem [DEPTH];
  logic [AW-1:0] wp, rp;

  always_ff @(posedge clk) if (push && !full) mem[wp] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (flush) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push && !full)  wp <= wp + 1'b1;
      if (pop && !empty)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  assign head  = mem[rp];
  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
