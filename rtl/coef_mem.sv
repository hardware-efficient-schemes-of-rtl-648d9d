// coef_mem -- constant memory of the quaternion multiplying unit.
//
// The kernels never form products or sums of the constants alpha, beta, gamma,
// delta themselves: each word of this memory holds, for one (s, t) pair, every
// precomputed constant the three kernels need (coef_set_t: alpha, alpha+beta,
// alpha-beta for sq; gamma-delta, gamma+delta, delta for qt; the nine products
// t_k*s_j for sqt).  In a transform processor one word per twiddle index would
// be loaded before a run; the memory is written by the host through a simple
// write port.
//
// Interface: one write port (we, waddr, wdata) and one read port (raddr ->
// rdata).  Both are synchronous; rdata shows the word at raddr one clock after
// raddr is presented.  A read of the address written in the same cycle returns
// the old word.  The array is not reset: words must be written before use.
//
// The paper only says that the constant products are computed in advance and
// kept in memory; the word layout, the depth (DEPTH = 64 words) and the
// one-cycle read latency are this design's own.
module coef_mem
  import qmul_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  coef_set_t       wdata,
  input  logic [AW-1:0]   raddr,
  output coef_set_t       rdata
);

  coef_set_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)
      mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
