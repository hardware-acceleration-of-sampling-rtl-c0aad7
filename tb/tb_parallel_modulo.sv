// tb_parallel_modulo: self-checking testbench for the 8-unit parallel modulo group.
//
// Sends a long stream of operations, mostly one per clock with occasional gaps,
// and checks that each result appears exactly 8 clocks after its operation, in
// order, with the right remainder and its own tag. Also checks that a burst of
// back-to-back operations gives one result every clock.
module tb_parallel_modulo;
  import concat_pkg::*;

  localparam int TAG_W = 20;
  localparam int NOPS  = 5000;

  logic             clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  rand_t            dividend = '0;
  degree_t          divisor = '0, out_rem;
  logic [TAG_W-1:0] in_tag = '0, out_tag;
  int checks = 0, failures = 0;
  int cycle = 0;

  parallel_modulo #(.TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  typedef struct { int t; int rem; int tag; } exp_t;
  exp_t q[$];
  int   sent = 0, got = 0, max_run = 0, run = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    rand_t a; degree_t d;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    while (sent < NOPS) begin
      if (sent < 1000 || $urandom_range(0, 9) != 0) begin
        a = rand_t'($urandom);
        d = degree_t'($urandom_range(1, (sent % 3 == 0) ? 65535 : 200));
        in_valid = 1'b1; dividend = a; divisor = d; in_tag = TAG_W'(sent);
        q.push_back('{t: cycle, rem: int'(a % d), tag: sent});
        sent++;
      end else begin
        in_valid = 1'b0;
      end
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
  end

  // monitor
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      exp_t e;
      run++;
      if (run > max_run) max_run = run;
      if (q.size() == 0) check(1'b0, "result with nothing outstanding");
      else begin
        e = q.pop_front();
        check(cycle - e.t == 8, $sformatf("op %0d latency %0d", e.tag, cycle - e.t));
        check(int'(out_rem) == e.rem, $sformatf("op %0d rem %0d exp %0d", e.tag, out_rem, e.rem));
        check(int'(out_tag) == e.tag, $sformatf("op %0d tag %0d", e.tag, out_tag));
      end
      got++;
      if (got == NOPS) begin
        check(max_run >= 1000, $sformatf("longest burst of results %0d", max_run));
        check(q.size() == 0, "operations left without result");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end else run = 0;
  end
endmodule
