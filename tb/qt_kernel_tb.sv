// qt_kernel_tb -- self-checking testbench of qt_kernel.
//
// Drives a stream of random quaternions and random constants (a fresh (s, t)
// pair with every quaternion, extremes of the signed ranges included) with
// random gaps in in_valid, and compares every result with the full Hamilton
// product worked out in 64-bit integers (tb_qmul_pkg).  It also checks that each
// result leaves exactly KERNEL_LATENCY = 3 clocks after its input, that nothing
// leaves during or after reset without an input, and that back-to-back inputs
// give back-to-back results.
module qt_kernel_tb;
  import qmul_pkg::*;
  import tb_qmul_pkg::*;

  localparam int N_SAMPLES = 3000;

  logic     clk = 1'b0;
  logic     rst_n;
  logic     in_valid;
  quat_t    q;
  qt_coef_t coef;
  logic     out_valid;
  quat_y1_t y;

  qt_kernel dut (.*);

  always #5 clk = ~clk;

  int     checks = 0;
  int     failures = 0;
  longint cycle = 0;
  int     sent = 0;
  int     received = 0;
  int     back_to_back = 0;
  logic   prev_out_valid = 1'b0;

  lq_t    exp_q [$];
  longint t_q   [$];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  // output monitor: outputs change on posedge, sampled on negedge
  always @(negedge clk) begin
    if (out_valid) begin
      lq_t    e;
      longint t0;
      check(exp_q.size() > 0, "result without an input");
      if (exp_q.size() > 0) begin
        e  = exp_q.pop_front();
        t0 = t_q.pop_front();
        check(cycle - t0 == 3, $sformatf("latency %0d", cycle - t0));
        check(longint'(y.y0) == e[0], $sformatf("y0 %0d expected %0d", longint'(y.y0), $signed(e[0])));
        check(longint'(y.y1) == e[1], $sformatf("y1 %0d expected %0d", longint'(y.y1), $signed(e[1])));
        check(longint'(y.y2) == e[2], $sformatf("y2 %0d expected %0d", longint'(y.y2), $signed(e[2])));
        check(longint'(y.y3) == e[3], $sformatf("y3 %0d expected %0d", longint'(y.y3), $signed(e[3])));
        received++;
        if (prev_out_valid) back_to_back++;
      end
    end
    prev_out_valid <= out_valid;
  end

  initial begin
    lq_t    e_sq, e_qt, e_sqt;
    longint al, be, ga, de;
    rst_n    = 1'b0;
    in_valid = 1'b1;            // ignored during reset
    q        = '0;
    coef     = '0;
    repeat (4) @(negedge clk);
    check(out_valid == 1'b0, "out_valid during reset");
    rst_n    = 1'b1;
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    check(out_valid == 1'b0, "out_valid without input");
    while (sent < N_SAMPLES) begin
      in_valid = ($urandom_range(0, 3) != 0) || (sent < 20);
      q  = rand_quat();
      al = rand_coef(); be = rand_coef(); ga = rand_coef(); de = rand_coef();
      begin
        coef_set_t cs;
        cs   = make_coef(al, be, ga, de);
        coef = cs.qt;
      end
      if (in_valid) begin
        ref_products(q, al, be, ga, de, e_sq, e_qt, e_sqt);
        exp_q.push_back(e_qt);
        t_q.push_back(cycle);
        sent++;
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (8) @(negedge clk);
    check(received == sent, $sformatf("received %0d of %0d results", received, sent));
    check(back_to_back > 0, "no back-to-back results");
    $display("qt_kernel: %0d results, %0d back to back", received, back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
