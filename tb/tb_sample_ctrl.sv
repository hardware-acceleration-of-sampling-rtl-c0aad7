// tb_sample_ctrl: self-checking testbench for the sampling controller.
//
// Runs the controller for several (num_nodes, num_neighbors) settings, with and
// without random stalls (a stall is only raised on a node's first request, as the
// large sampler does), and checks the order of the issued (node, sample) pairs,
// the first/last flags, that an unstalled run issues one request every clock, the
// `done` pulse, and that empty runs finish at once.
module tb_sample_ctrl;
  import concat_pkg::*;

  logic                  clk = 1'b0, rst_n = 1'b0, start = 1'b0, stall_en = 1'b0;
  logic [NODE_CNT_W-1:0] num_nodes = '0;
  logic [NBR_CNT_W-1:0]  num_neighbors = '0;
  logic                  stall, busy, issue, first, last, done;
  logic [NODE_CNT_W-1:0] node_idx;
  logic [NBR_CNT_W-1:0]  sample_idx;
  int checks = 0, failures = 0;
  logic rnd_bit = 1'b0;

  sample_ctrl dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) rnd_bit <= 1'($urandom_range(0, 1));
  assign stall = stall_en && first && busy && rnd_bit;

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

  task automatic run(input int n, input int k, input bit with_stall);
    int i = 0, j = 0, cycles = 0, stalls = 0, issued = 0;
    stall_en = with_stall;
    start = 1'b1; num_nodes = NODE_CNT_W'(n); num_neighbors = NBR_CNT_W'(k);
    @(posedge clk); #1;
    start = 1'b0;
    if (n == 0 || k == 0) begin
      check(done && !busy, $sformatf("empty run n=%0d k=%0d", n, k));
    end else begin
      while (!done) begin
        cycles++;
        if (issue) begin
          check(int'(node_idx) == i && int'(sample_idx) == j,
                $sformatf("issued (%0d,%0d) expected (%0d,%0d)", node_idx, sample_idx, i, j));
          check(first == (j == 0) && last == (j == k - 1), "first/last flags");
          issued++;
          j++;
          if (j == k) begin j = 0; i++; end
        end else if (busy) stalls++;
        @(posedge clk); #1;
      end
      check(issued == n * k, $sformatf("issued %0d of %0d", issued, n * k));
      if (!with_stall) check(cycles == n * k, $sformatf("unstalled run took %0d clocks for %0d", cycles, n * k));
      else check(stalls > 0 && cycles == n * k + stalls, "stalled run");
      @(posedge clk); #1;
      check(!done, "done longer than one clock");
    end
    @(posedge clk); #1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(6, 15, 1'b0);
    run(1, 1, 1'b0);
    run(20, 1, 1'b0);
    run(37, 4, 1'b1);
    run(0, 15, 1'b0);
    run(5, 0, 1'b0);
    run(200, 15, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
