// tb_modulo_unit: self-checking testbench for one multi-cycle modulo unit.
//
// Drives random 16-bit dividends and divisors (including 1, powers of two, values
// above the dividend and the full range), checks the remainder against the `%`
// operator, and checks the published timing: operands given in clock n, result in
// clock n+8 with `done` high for exactly that clock. Back-to-back operations are
// issued in the clock in which the previous result appears.
module tb_modulo_unit;
  import concat_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  rand_t   dividend = '0;
  degree_t divisor = '0, rem;
  int      checks = 0, failures = 0;

  modulo_unit dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rand_t   a;
    degree_t d;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      a = rand_t'($urandom);
      case (t % 6)
        0: d = degree_t'($urandom_range(1, 60));
        1: d = degree_t'(1);
        2: d = degree_t'(1 << $urandom_range(0, 15));
        3: d = degree_t'($urandom_range(1, 65535));
        4: d = degree_t'(a) + degree_t'($urandom_range(1, 100));
        default: d = degree_t'($urandom_range(1, 300));
      endcase
      if (d == '0) d = 16'd7;
      // clock n: operands presented
      start = 1'b1; dividend = a; divisor = d;
      @(posedge clk); #1;
      start = 1'b0; dividend = '0; divisor = '0;
      // clocks n+1 .. n+7: busy, no result
      for (int c = 1; c < 8; c++) begin
        if (done) check(1'b0, $sformatf("done early at n+%0d", c));
        @(posedge clk); #1;
      end
      // clock n+8: result
      check(done, $sformatf("done missing at n+8 (%0d mod %0d)", a, d));
      check(rem == a % d, $sformatf("%0d mod %0d: got %0d", a, d, rem));
      check(!busy, "busy in result clock");
    end
    // gap: done is a one-clock pulse
    @(posedge clk); #1;
    check(!done, "done longer than one clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
