// sq_kernel -- left-sided product y = s*q of a quaternion q by the constant
// i-quaternion s = alpha + beta*i, with six multipliers and six two-input adders.
//
// The product splits into two independent complex-like 2x2 blocks:
//   y0 = alpha*q0 - beta*q1     y2 = alpha*q2 - beta*q3
//   y1 = beta*q0  + alpha*q1    y3 = beta*q2  + alpha*q3
// Each block is computed as Y = P * A4x6 * D6 * A6x4 * X (eq. (1) of the scheme):
//   pre-addition  A6x4 : (x0 - x1, x0, x1)                      1 adder per block
//   multiplication D6  : (alpha, d1, d2) with d1 = alpha + beta,
//                         d2 = alpha - beta                        3 multipliers per block
//   post-addition A4x6 : (-m0 + m1, m0 + m2), then P swaps the pair 2 adders per block
// The constants alpha, d1, d2 are supplied precomputed (from a constant memory),
// so no adder is spent on them.
//
// Interface: q and coef are sampled together with in_valid; y appears with
// out_valid exactly KERNEL_LATENCY = 3 clock cycles later.  One quaternion per
// clock is accepted, with no stall.  rst_n is an active-low synchronous reset of
// the valid pipeline only.
//
// Follows the paper: the factorisation, the six multipliers and six adders.
// The printed diagonal D6(1) = diag(alpha, d1, d2, d1, d2, alpha) does not give
// s*q for the second block; the order used here, diag(alpha, d1, d2, alpha, d1, d2),
// repeats the first block and does.  Own choices: widths, full-precision
// (unrounded) results and the three register stages.
module sq_kernel
  import qmul_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  quat_t    q,
  input  sq_coef_t coef,
  output logic     out_valid,
  output quat_y1_t y
);

  typedef logic signed [DATA_W:0] pre_t;   // one bit of growth from the pre-adder

  // ---- stage 1: pre-addition A6x4, constants registered alongside ----------
  pre_t     u [6];
  sq_coef_t coef_s1;
  logic     v_s1;

  always_ff @(posedge clk) begin
    u[0]    <= pre_t'(q.q0) - pre_t'(q.q1);
    u[1]    <= pre_t'(q.q0);
    u[2]    <= pre_t'(q.q1);
    u[3]    <= pre_t'(q.q2) - pre_t'(q.q3);
    u[4]    <= pre_t'(q.q2);
    u[5]    <= pre_t'(q.q3);
    coef_s1 <= coef;
  end

  // ---- stage 2: the six constant multipliers D6 -----------------------------
  y1_t m [6];

  always_ff @(posedge clk) begin
    m[0] <= y1_t'(u[0]) * y1_t'(coef_s1.alpha);
    m[1] <= y1_t'(u[1]) * y1_t'(coef_s1.d1);
    m[2] <= y1_t'(u[2]) * y1_t'(coef_s1.d2);
    m[3] <= y1_t'(u[3]) * y1_t'(coef_s1.alpha);
    m[4] <= y1_t'(u[4]) * y1_t'(coef_s1.d1);
    m[5] <= y1_t'(u[5]) * y1_t'(coef_s1.d2);
  end

  // ---- stage 3: post-addition A4x6 and output permutation P4(1) ------------
  always_ff @(posedge clk) begin
    y.y0 <= m[0] + m[2];
    y.y1 <= m[1] - m[0];
    y.y2 <= m[3] + m[5];
    y.y3 <= m[4] - m[3];
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
