// sqt_kernel -- two-sided product y = s*q*t of a quaternion q by the constant
// i-quaternion s = alpha + beta*i on the left and the constant j-quaternion
// t = gamma + delta*j on the right, with nine multipliers.
//
// Written as a matrix, y = M*q with M = [[gamma*S, -delta*S], [delta*S, gamma*S]]
// acting on the pairs u = (q0, q1) and v = (q2, q3), where S = [[alpha, -beta],
// [beta, alpha]] is the 2x2 block of the left product.  M is the Kronecker
// product T (x) S of the right and left 2x2 blocks, and each of those already has
// a three-multiplier factorisation A*D*B (the ones of qt_kernel and sq_kernel).
// Hence M = (A_T (x) A_S) * (D_T (x) D_S) * (B_T (x) B_S):
//   pre-addition  : (u, v, u - v), then on each pair (x0 - x1, x0, x1)
//                   -> 9 values z[3k+j], 5 two-input adders
//   multiplication: m[3k+j] = z[3k+j] * p[3k+j], p[3k+j] = t_k * s_j,
//                   t = (gamma - delta, gamma + delta, delta),
//                   s = (alpha, alpha + beta, alpha - beta)   -> 9 multipliers
//   post-addition : each output the signed sum of four products
//                   y0 =  m0 + m2 + m6 + m8    y1 = -m0 + m1 - m6 + m7
//                   y2 =  m3 + m5 + m6 + m8    y3 = -m3 + m4 - m6 + m7
//                   -> 4 four-input adders
// The nine constants p are products of constants and are computed ahead of time
// and stored (coef_mem); among them are alpha*delta, alpha*(gamma - delta) and
// (alpha - beta)*(gamma - delta), three of the constants the scheme names.
//
// Interface and timing are those of sq_kernel: q and coef sampled with
// in_valid, y valid KERNEL_LATENCY = 3 cycles later with out_valid, one
// quaternion per clock, active-low synchronous reset of the valid pipeline.
//
// Follows the paper: nine multipliers by precomputed constant products, four
// four-input output adders, and the constants just named.  The paper's own
// matrices for this scheme cannot be reproduced (the output matrix A4x9 is not
// given and the printed diagonal repeats constants and gives p1 as a plain
// alpha - beta), so the factorisation here is derived from the two one-sided
// schemes.  It needs 5 two-input adders where the paper counts 6, and has no
// separate H2 butterfly stages.  Widths, exact results and the register stages
// are this design's own.
module sqt_kernel
  import qmul_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  quat_t     q,
  input  sqt_coef_t coef,
  output logic      out_valid,
  output quat_y2_t  y
);

  typedef logic signed [DATA_W+1:0] pre_t;   // two bits of growth: two adder levels

  // ---- stage 1: pre-addition (B_T (x) B_S) ---------------------------------
  pre_t w [3][2];
  always_comb begin
    w[0][0] = pre_t'(q.q0);
    w[0][1] = pre_t'(q.q1);
    w[1][0] = pre_t'(q.q2);
    w[1][1] = pre_t'(q.q3);
    w[2][0] = pre_t'(q.q0) - pre_t'(q.q2);
    w[2][1] = pre_t'(q.q1) - pre_t'(q.q3);
  end

  pre_t      z [9];
  sqt_coef_t coef_s1;
  logic      v_s1;

  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      z[3*k]   <= w[k][0] - w[k][1];
      z[3*k+1] <= w[k][0];
      z[3*k+2] <= w[k][1];
    end
    coef_s1 <= coef;
  end

  // ---- stage 2: the nine constant multipliers D9 ----------------------------
  y2_t m [9];

  always_ff @(posedge clk) begin
    for (int n = 0; n < 9; n++)
      m[n] <= y2_t'(z[n]) * y2_t'(c2_t'(coef_s1[n]));
  end

  // ---- stage 3: four four-input adders (A_T (x) A_S) ------------------------
  always_ff @(posedge clk) begin
    y.y0 <=  m[0] + m[2] + m[6] + m[8];
    y.y1 <= -m[0] + m[1] - m[6] + m[7];
    y.y2 <=  m[3] + m[5] + m[6] + m[8];
    y.y3 <= -m[3] + m[4] - m[6] + m[7];
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
