// tb_base_addr_unit: self-checking testbench for the running-sum base address.
//
// Uses the example graph of the published degree/edge-list figure (degrees
// 4, 2, 1, 1, 2, 2: node 0's neighbours at x_e0, node 1's at x_e0+4, ...), then a
// long random degree sequence, and checks the base of every node against a sum
// kept by the testbench; also checks that `advance` low holds the base and that
// the address wraps at 2^AW.
module tb_base_addr_unit;
  import concat_pkg::*;

  localparam int AW = 14;

  logic          clk = 1'b0, rst_n = 1'b0, init = 1'b0, advance = 1'b0;
  logic [AW-1:0] x_e0 = '0, base;
  degree_t       degree = '0;
  int checks = 0, failures = 0;

  base_addr_unit #(.AW(AW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int fig_deg[6] = '{4, 2, 1, 1, 2, 2};
    automatic int fig_base[6] = '{0, 4, 6, 7, 8, 10};
    longint sum;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    init = 1'b1; x_e0 = '0;
    @(posedge clk); #1;
    init = 1'b0;
    for (int i = 0; i < 6; i++) begin
      check(int'(base) == fig_base[i], $sformatf("figure node %0d base %0d", i, base));
      advance = 1'b1; degree = degree_t'(fig_deg[i]);
      @(posedge clk); #1;
      advance = 1'b0;
      @(posedge clk); #1;
    end
    // random sequence from a non-zero x_e0, with idle clocks
    init = 1'b1; x_e0 = AW'(1234);
    @(posedge clk); #1;
    init = 1'b0;
    sum = 1234;
    for (int i = 0; i < 5000; i++) begin
      check(longint'(base) == (sum % (1 << AW)), $sformatf("node %0d base %0d exp %0d", i, base, sum % (1 << AW)));
      if ($urandom_range(0, 3) == 0) begin
        advance = 1'b0;
        @(posedge clk); #1;
        check(longint'(base) == (sum % (1 << AW)), "base changed without advance");
      end
      advance = 1'b1; degree = degree_t'($urandom_range(0, 60));
      sum += degree;
      @(posedge clk); #1;
      advance = 1'b0;
    end
    check(sum >= (1 << AW), "sequence did not wrap the address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
