// qmu_top_tb -- end-to-end testbench of the quaternion multiplying unit, run at
// the default parameters (64-word constant memory, 16-bit data and constants).
//
// 1. Loads the whole constant memory.  Words 0..31 hold DFT twiddle pairs
//    s = cos(2*pi*k/32) - i*sin(2*pi*k/32), t = cos(2*pi*k/32) - j*sin(2*pi*k/32)
//    in 14 fractional bits; words 32..63 hold random constants.
// 2. Streams random quaternions, each naming a random word, with random idle
//    clocks, while now and then rewriting a word of the memory, sometimes the
//    very word a quaternion reads in the same clock (the old word must be used).
// 3. Checks the three products of every quaternion against the Hamilton product
//    computed from the memory contents the quaternion saw, and checks the
//    4-clock latency.
// Each mechanism (back-to-back results, idle gaps, rewrite during streaming,
// same-clock rewrite of the word being read, twiddle and random words) is
// counted; one that never happened counts as a failure.
module qmu_top_tb;
  import qmul_pkg::*;
  import tb_qmul_pkg::*;

  localparam int unsigned DEPTH     = 64;
  localparam int unsigned AW        = $clog2(DEPTH);
  localparam int          N_SAMPLES = 4000;
  localparam int          TW_N      = 32;
  localparam real         PI        = 3.14159265358979323846;

  logic          clk = 1'b0;
  logic          rst_n;
  logic          coef_we;
  logic [AW-1:0] coef_waddr;
  coef_set_t     coef_wdata;
  logic          in_valid;
  quat_t         q;
  logic [AW-1:0] coef_addr;
  logic          out_valid;
  quat_y1_t      y_sq;
  quat_y1_t      y_qt;
  quat_y2_t      y_sqt;

  qmu_top dut (.*);

  always #5 clk = ~clk;

  int     checks = 0;
  int     failures = 0;
  longint cycle = 0;
  int     sent = 0;
  int     received = 0;
  int     n_back_to_back = 0;
  int     n_idle = 0;
  int     n_rewrite = 0;
  int     n_same_clock = 0;
  int     n_twiddle = 0;
  int     n_random = 0;
  logic   prev_out_valid = 1'b0;

  // software copy of the memory: raw constants of every word
  longint m_al [DEPTH];
  longint m_be [DEPTH];
  longint m_ga [DEPTH];
  longint m_de [DEPTH];

  lq_t    exp_sq [$];
  lq_t    exp_qt [$];
  lq_t    exp_sqt [$];
  longint t_q [$];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL cycle %0d: %s", cycle, what);
    end
  endtask

  task automatic check_q1(input quat_y1_t y, input lq_t e, input string what);
    check(longint'(y.y0) == e[0] && longint'(y.y1) == e[1] &&
          longint'(y.y2) == e[2] && longint'(y.y3) == e[3], what);
  endtask

  task automatic check_q2(input quat_y2_t y, input lq_t e, input string what);
    check(longint'(y.y0) == e[0] && longint'(y.y1) == e[1] &&
          longint'(y.y2) == e[2] && longint'(y.y3) == e[3], what);
  endtask

  always @(negedge clk) begin
    if (out_valid) begin
      check(t_q.size() > 0, "result without an input");
      if (t_q.size() > 0) begin
        check(cycle - t_q.pop_front() == 4, "latency");
        check_q1(y_sq,  exp_sq.pop_front(),  "s*q");
        check_q1(y_qt,  exp_qt.pop_front(),  "q*t");
        check_q2(y_sqt, exp_sqt.pop_front(), "s*q*t");
        received++;
        if (prev_out_valid) n_back_to_back++;
      end
    end
    prev_out_valid <= out_valid;
  end

  function automatic longint fix14(input real x);
    return longint'($rtoi(x * 16384.0 + (x >= 0.0 ? 0.5 : -0.5)));
  endfunction

  task automatic set_word(input int a, input longint al, input longint be,
                          input longint ga, input longint de);
    m_al[a] = al; m_be[a] = be; m_ga[a] = ga; m_de[a] = de;
  endtask

  initial begin
    lq_t    e_sq, e_qt, e_sqt;
    int     a, wa;
    longint nal, nbe, nga, nde;
    bit     do_write;

    rst_n = 1'b0; coef_we = 1'b0; coef_waddr = '0; coef_wdata = '0;
    in_valid = 1'b0; q = '0; coef_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. load the constant memory
    for (int i = 0; i < DEPTH; i++) begin
      if (i < TW_N)
        set_word(i, fix14($cos(2.0 * PI * i / TW_N)), -fix14($sin(2.0 * PI * i / TW_N)),
                    fix14($cos(2.0 * PI * i / TW_N)), -fix14($sin(2.0 * PI * i / TW_N)));
      else
        set_word(i, rand_coef(), rand_coef(), rand_coef(), rand_coef());
      coef_we    = 1'b1;
      coef_waddr = AW'(i);
      coef_wdata = make_coef(m_al[i], m_be[i], m_ga[i], m_de[i]);
      @(negedge clk);
    end
    coef_we = 1'b0;
    repeat (2) @(negedge clk);
    check(out_valid == 1'b0, "out_valid without input");

    // 2. stream
    while (sent < N_SAMPLES) begin
      in_valid  = ($urandom_range(0, 4) != 0);
      q         = rand_quat();
      a         = $urandom_range(0, DEPTH - 1);
      coef_addr = AW'(a);
      do_write  = ($urandom_range(0, 15) == 0);
      wa        = ($urandom_range(0, 1) == 0) ? a : $urandom_range(TW_N, DEPTH - 1);
      if (wa < TW_N) do_write = 1'b0;     // keep the twiddle words
      coef_we   = do_write;
      nal = rand_coef(); nbe = rand_coef(); nga = rand_coef(); nde = rand_coef();
      coef_waddr = AW'(wa);
      coef_wdata = make_coef(nal, nbe, nga, nde);
      if (in_valid) begin
        ref_products(q, m_al[a], m_be[a], m_ga[a], m_de[a], e_sq, e_qt, e_sqt);
        exp_sq.push_back(e_sq);
        exp_qt.push_back(e_qt);
        exp_sqt.push_back(e_sqt);
        t_q.push_back(cycle);
        sent++;
        if (a < TW_N) n_twiddle++; else n_random++;
        if (do_write && wa == a) n_same_clock++;
      end else begin
        n_idle++;
      end
      if (do_write) begin
        n_rewrite++;
        set_word(wa, nal, nbe, nga, nde);   // visible from the next clock on
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
    coef_we  = 1'b0;
    repeat (8) @(negedge clk);

    check(received == sent, $sformatf("received %0d of %0d", received, sent));
    check(n_back_to_back > 0, "no back-to-back results");
    check(n_idle > 0, "no idle clocks");
    check(n_rewrite > 0, "no rewrite during streaming");
    check(n_same_clock > 0, "no same-clock rewrite of the word read");
    check(n_twiddle > 0, "no twiddle word used");
    check(n_random > 0, "no random word used");
    $display("qmu_top: %0d results, back-to-back %0d, idle %0d, rewrites %0d, same-clock %0d, twiddle %0d, random %0d",
             received, n_back_to_back, n_idle, n_rewrite, n_same_clock, n_twiddle, n_random);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
