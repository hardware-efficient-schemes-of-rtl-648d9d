// qmu_top -- quaternion multiplying unit for a 2D discrete quaternion Fourier
// transform datapath: one stream of quaternions q, one constant memory, and the
// three product kernels s*q, q*t and s*q*t working side by side.
//
// Every clock the unit may accept one quaternion q together with the address of
// a constant set (coef_addr) in the constant memory.  The memory read takes one
// clock, during which q waits in a register; the constant set and q then enter
// all three kernels at once, and KERNEL_LATENCY = 3 clocks later the three
// products leave together with out_valid.  Total latency from in_valid to
// out_valid: LATENCY = 4 clocks; throughput one quaternion per clock, no stall.
//
// The constant memory is loaded through coef_we / coef_waddr / coef_wdata; a
// word must be written before a quaternion that names it enters.  rst_n is an
// active-low synchronous reset of the valid pipeline.
//
// Only the three kernels and the idea of a memory of precomputed constants come
// from the paper.  Feeding all three kernels from one stream and one memory, and
// the latencies, are this design's way of putting them in one block; the
// transform processor that would sequence data and constant addresses is not
// part of it and connects through these ports.
module qmu_top
  import qmul_pkg::*;
#(
  parameter int unsigned COEF_DEPTH = 64,
  localparam int unsigned AW        = (COEF_DEPTH > 1) ? $clog2(COEF_DEPTH) : 1,
  localparam int unsigned LATENCY   = 1 + KERNEL_LATENCY
) (
  input  logic          clk,
  input  logic          rst_n,
  // constant memory load port
  input  logic          coef_we,
  input  logic [AW-1:0] coef_waddr,
  input  coef_set_t     coef_wdata,
  // quaternion stream in
  input  logic          in_valid,
  input  quat_t         q,
  input  logic [AW-1:0] coef_addr,
  // products out
  output logic          out_valid,
  output quat_y1_t      y_sq,
  output quat_y1_t      y_qt,
  output quat_y2_t      y_sqt
);

  // ---- constant memory ------------------------------------------------------
  coef_set_t coef;

  coef_mem #(.DEPTH(COEF_DEPTH)) u_coef_mem (
    .clk   (clk),
    .we    (coef_we),
    .waddr (coef_waddr),
    .wdata (coef_wdata),
    .raddr (coef_addr),
    .rdata (coef)
  );

  // ---- align q with the memory read ------------------------------------------
  quat_t q_d;
  logic  v_d;

  always_ff @(posedge clk) begin
    q_d <= q;
    if (!rst_n) v_d <= 1'b0;
    else        v_d <= in_valid;
  end

  // ---- the three kernels ------------------------------------------------------
  logic v_sq, v_qt, v_sqt;

  sq_kernel u_sq (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (v_d),
    .q         (q_d),
    .coef      (coef.sq),
    .out_valid (v_sq),
    .y         (y_sq)
  );

  qt_kernel u_qt (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (v_d),
    .q         (q_d),
    .coef      (coef.qt),
    .out_valid (v_qt),
    .y         (y_qt)
  );

  sqt_kernel u_sqt (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (v_d),
    .q         (q_d),
    .coef      (coef.sqt),
    .out_valid (v_sqt),
    .y         (y_sqt)
  );

  // The three kernels have the same depth, so their valids move in lock step.
  assign out_valid = v_sq;

  always_ff @(posedge clk) begin
    if (rst_n)
      assert (v_sq == v_qt && v_sq == v_sqt)
        else $error("qmu_top: kernel valid pipelines out of step");
  end

endmodule
