// qt_kernel -- right-sided product y = q*t of a quaternion q by the constant
// j-quaternion t = gamma + delta*j, with six multipliers and six two-input adders.
//
// After the permutation P that swaps q1 and q2 the product again falls into two
// independent 2x2 blocks, on the pairs (q0, q2) and (q1, q3):
//   y0 = gamma*q0 - delta*q2    y1 = gamma*q1 - delta*q3
//   y2 = delta*q0 + gamma*q2    y3 = delta*q1 + gamma*q3
// Each block (a, b) is computed as P * A4x6 * D6 * A6x4 * P * X (eq. (2)):
//   pre-addition  A6x4 : (a, b, a - b)                         1 adder per block
//   multiplication D6  : (g1, g2, delta), g1 = gamma - delta,
//                         g2 = gamma + delta                     3 multipliers per block
//   post-addition A4x6 : (m0 + m2, m1 + m2)                      2 adders per block
// and the final P swaps y1 and y2 back into place.  g1, g2 and delta arrive
// precomputed from the constant memory.
//
// Interface and timing are those of sq_kernel: q and coef sampled with
// in_valid, y valid KERNEL_LATENCY = 3 cycles later with out_valid, one
// quaternion per clock, active-low synchronous reset of the valid pipeline.
//
// Follows the paper: the block structure, the post-addition matrix A4x6(2), the
// constants g1 and g2, six multipliers and six adders.  The printed text of
// eq. (2) is incomplete (D6(2) is not given, the permutation P4(2) and the rows
// of A6x4(2) do not produce q*t); the permutation used is the printed P4(3), the
// pre-addition rows are (1 0), (0 1), (1 -1) and the third constant is delta,
// which is the choice that makes the printed A4x6(2) exact.  Widths, exact
// results and the register stages are this design's own.
module qt_kernel
  import qmul_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  quat_t    q,
  input  qt_coef_t coef,
  output logic     out_valid,
  output quat_y1_t y
);

  typedef logic signed [DATA_W:0] pre_t;

  // ---- input permutation P: x = (q0, q2, q1, q3) -----------------------------
  data_t x [4];
  always_comb begin
    x[0] = q.q0;
    x[1] = q.q2;
    x[2] = q.q1;
    x[3] = q.q3;
  end

  // ---- stage 1: pre-addition A6x4 ------------------------------------------
  pre_t     u [6];
  qt_coef_t coef_s1;
  logic     v_s1;

  always_ff @(posedge clk) begin
    u[0]    <= pre_t'(x[0]);
    u[1]    <= pre_t'(x[1]);
    u[2]    <= pre_t'(x[0]) - pre_t'(x[1]);
    u[3]    <= pre_t'(x[2]);
    u[4]    <= pre_t'(x[3]);
    u[5]    <= pre_t'(x[2]) - pre_t'(x[3]);
    coef_s1 <= coef;
  end

  // ---- stage 2: the six constant multipliers D6 = diag(g1, g2, delta, g1, g2, delta)
  y1_t m [6];

  always_ff @(posedge clk) begin
    m[0] <= y1_t'(u[0]) * y1_t'(coef_s1.g1);
    m[1] <= y1_t'(u[1]) * y1_t'(coef_s1.g2);
    m[2] <= y1_t'(u[2]) * y1_t'(coef_s1.delta);
    m[3] <= y1_t'(u[3]) * y1_t'(coef_s1.g1);
    m[4] <= y1_t'(u[4]) * y1_t'(coef_s1.g2);
    m[5] <= y1_t'(u[5]) * y1_t'(coef_s1.delta);
  end

  // ---- stage 3: post-addition A4x6 and output permutation P ----------------
  always_ff @(posedge clk) begin
    y.y0 <= m[0] + m[2];
    y.y2 <= m[1] + m[2];
    y.y1 <= m[3] + m[5];
    y.y3 <= m[4] + m[5];
  end

  // ---- valid pipeline ------------------------------------------------------
  logic v_s2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_s1      <= 1'b0;
      v_s2      <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v_s1      <= in_valid;
      v_s2      <= v_s1;
      out_valid <= v_s2;
    end
  end

endmodule
