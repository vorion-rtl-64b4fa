// l2_model: behavioural stand-in for the L2 slice as seen by a Gaussian
// rasterizer or the pixel unit: a memory of Gaussian records, one record per
// address, answering each accepted request after LAT cycles in order, with
// a pseudo-random request-ready pattern. Testbench use only.
module l2_model
  import vorion_pkg::*;
#(
  parameter int LAT   = 8,
  parameter int WORDS = 1024,
  parameter int BUSY_PCT = 20
) (
  input  logic        clk,
  input  logic        req_valid,
  input  logic [31:0] req_addr,
  output logic        req_ready,
  output logic        rsp_valid,
  output gauss_t      rsp_data
);
  gauss_t mem [WORDS];
  typedef struct { int due; gauss_t d; } pend_t;
  pend_t q[$];
  int cyc = 0;
  initial begin req_ready = 1; rsp_valid = 0; rsp_data = '0; end
  always @(posedge clk) begin
    cyc++;
    if (req_valid && req_ready) q.push_back('{due: cyc + LAT, d: mem[req_addr % WORDS]});
    rsp_valid <= 0;
    if (q.size() > 0 && q[0].due <= cyc) begin
      rsp_valid <= 1;
      rsp_data  <= q[0].d;
      void'(q.pop_front());
    end
    req_ready <= ($urandom_range(0, 99) >= BUSY_PCT);
  end
endmodule
