// tb_lfsr16: self-checking testbench for the 16-bit LFSR.
//
// Compares every state with a bit-level model of the recurrence for the polynomial
// x^16 + x^14 + x^13 + x^11 + 1 (each new bit written out from the taps), checks the
// full period of 65,535 non-zero states, that `en` low holds the state, and that a
// seed load (and a zero seed falling back to SEED) works.
module tb_lfsr16;
  import concat_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, en = 1'b0, seed_we = 1'b0;
  rand_t seed = '0, r;
  int    checks = 0, failures = 0;

  lfsr16 #(.SEED(16'hACE1)) dut (.*);

  always #5 clk = ~clk;

  function automatic rand_t model_next(input rand_t s);
    rand_t n;
    for (int i = 0; i < 15; i++) n[i] = s[i+1];
    n[15] = s[0];
    n[13] = s[14] ^ s[0];
    n[12] = s[13] ^ s[0];
    n[10] = s[11] ^ s[0];
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rand_t exp_s;
    int    period;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(r == 16'hACE1, "reset value");
    // en low holds
    repeat (3) @(posedge clk);
    #1 check(r == 16'hACE1, "hold with en low");
    // full period, compared step by step
    en = 1'b1;
    exp_s = 16'hACE1;
    period = 0;
    do begin
      @(posedge clk); #1;
      exp_s = model_next(exp_s);
      period++;
      if (r != exp_s || r == '0) check(1'b0, $sformatf("step %0d: got %h expected %h", period, r, exp_s));
      else if (period % 4096 == 0) check(1'b1, "");
    end while (r != 16'hACE1 && period < 70000);
    check(period == 65535, $sformatf("period %0d, expected 65535", period));
    // seed load
    seed_we = 1'b1; seed = 16'h1234;
    @(posedge clk); #1;
    seed_we = 1'b0;
    check(r == 16'h1234, "seed load");
    @(posedge clk); #1;
    check(r == model_next(16'h1234), "step after seed load");
    en = 1'b0;
    seed_we = 1'b1; seed = 16'h0000;
    @(posedge clk); #1;
    seed_we = 1'b0;
    check(r == 16'hACE1, "zero seed falls back to SEED");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
