// qmul_pkg -- shared widths and types of the quaternion multiplying units.
//
// A quaternion q = q0 + q1*i + q2*j + q3*k travels as a packed struct of four
// signed two's-complement components.  The constant operands
//   s = alpha + beta*i   (an "i-quaternion", left factor)
//   t = gamma + delta*j  (a "j-quaternion", right factor)
// are never multiplied out in hardware: the kernels take constants that were
// computed ahead of time (sums such as alpha+beta, and for the two-sided
// kernel products such as (alpha-beta)*(gamma-delta)) and stored in memory.
// The word widths, the fixed-point format and the full-precision results are
// choices of this design; the scheme itself fixes none of them.
//
// Arithmetic is exact: nothing is rounded or saturated.  With alpha..delta
// scaled by 2^F the one-sided results carry a scale of 2^F and the two-sided
// result a scale of 2^(2F); the consumer picks its own output bits.
package qmul_pkg;

  localparam int unsigned DATA_W = 16;             // quaternion component width
  localparam int unsigned COEF_W = 16;             // alpha, beta, gamma, delta width
  localparam int unsigned C1_W   = COEF_W + 1;     // one-sided constants (a sum of two)
  localparam int unsigned C2_W   = 2 * C1_W;       // two-sided constants (product of two sums)
  localparam int unsigned Y1_W   = DATA_W + COEF_W + 2;      // sq / qt result component
  localparam int unsigned Y2_W   = DATA_W + 2 * COEF_W + 2;  // sqt result component

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [C1_W-1:0]   c1_t;
  typedef logic signed [C2_W-1:0]   c2_t;
  typedef logic signed [Y1_W-1:0]   y1_t;
  typedef logic signed [Y2_W-1:0]   y2_t;

  // Input quaternion q = q0 + q1 i + q2 j + q3 k
  typedef struct packed {
    data_t q0;
    data_t q1;
    data_t q2;
    data_t q3;
  } quat_t;

  // Result of sq or qt
  typedef struct packed {
    y1_t y0;
    y1_t y1;
    y1_t y2;
    y1_t y3;
  } quat_y1_t;

  // Result of sqt
  typedef struct packed {
    y2_t y0;
    y2_t y1;
    y2_t y2;
    y2_t y3;
  } quat_y2_t;

  // Constants of the sq kernel, the diagonal of D6(1) per 2x2 block:
  // alpha, d1 = alpha + beta, d2 = alpha - beta.
  typedef struct packed {
    c1_t alpha;
    c1_t d1;
    c1_t d2;
  } sq_coef_t;

  // Constants of the qt kernel, the diagonal of D6(2) per 2x2 block:
  // g1 = gamma - delta, g2 = gamma + delta, delta.
  typedef struct packed {
    c1_t g1;
    c1_t g2;
    c1_t delta;
  } qt_coef_t;

  // Constants of the sqt kernel, the diagonal of D9: p[k*3+j] = t_k * s_j with
  // t = (gamma-delta, gamma+delta, delta) and s = (alpha, alpha+beta, alpha-beta).
  typedef logic [8:0][C2_W-1:0] sqt_coef_t;

  // One word of the constant memory: everything the three kernels need for
  // one (s, t) pair.
  typedef struct packed {
    sq_coef_t  sq;
    qt_coef_t  qt;
    sqt_coef_t sqt;
  } coef_set_t;

  // Pipeline depth of every kernel: pre-addition, multiplication, post-addition.
  localparam int unsigned KERNEL_LATENCY = 3;

endpackage
