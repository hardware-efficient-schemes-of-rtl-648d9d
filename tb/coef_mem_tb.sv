// coef_mem_tb -- self-checking testbench of coef_mem.
//
// Fills every word with a pattern derived from its address, reads all words back
// in random order (checking the one-clock read latency), then mixes random
// writes and reads against a software copy of the memory, including reads of
// the address written in the same clock, which must return the old word.
module coef_mem_tb;
  import qmul_pkg::*;

  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic          clk = 1'b0;
  logic          we;
  logic [AW-1:0] waddr;
  coef_set_t     wdata;
  logic [AW-1:0] raddr;
  coef_set_t     rdata;

  coef_mem #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int same_addr = 0;
  coef_set_t model [DEPTH];

  function automatic coef_set_t rand_word();
    coef_set_t w;
    for (int b = 0; b < $bits(coef_set_t); b += 32)
      w[b +: 32] = $urandom;
    return w;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    coef_set_t   expect_w;
    int unsigned a, ra, wa;
    we = 1'b0; waddr = '0; wdata = '0; raddr = '0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i);
      wdata = rand_word();
      model[i] = wdata;
    end
    @(negedge clk);
    we = 1'b0;
    // read back in random order
    for (int n = 0; n < 4 * DEPTH; n++) begin
      a = $urandom_range(0, DEPTH - 1);
      raddr = AW'(a);
      expect_w = model[a];
      @(negedge clk);
      check(rdata == expect_w, $sformatf("read of word %0d", a));
    end
    // random mix, one clock read latency, read-before-write on collisions
    for (int n = 0; n < 2000; n++) begin
      ra = $urandom_range(0, DEPTH - 1);
      wa = ($urandom_range(0, 3) == 0) ? ra : $urandom_range(0, DEPTH - 1);
      we    = $urandom_range(0, 1);
      waddr = AW'(wa);
      wdata = rand_word();
      raddr = AW'(ra);
      expect_w = model[ra];
      if (we && wa == ra) same_addr++;
      @(negedge clk);
      if (we) model[wa] = wdata;
      check(rdata == expect_w, $sformatf("mixed read of word %0d", ra));
    end
    check(same_addr > 0, "no same-address read and write");
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
