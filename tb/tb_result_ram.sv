// tb_result_ram: self-checking testbench for the sampled-ID result RAM.
//
// Appends IDs with gaps, reads them all back in order, checks the count, then
// fills past DEPTH and checks that the extra IDs are dropped, `overflow` is set
// and the stored IDs are intact, and that `clear` restarts the RAM.
module tb_result_ram;
  import concat_pkg::*;

  localparam int DEPTH = 256;
  localparam int AW    = $clog2(DEPTH);

  logic          clk = 1'b0, rst_n = 1'b0, clear = 1'b0, we = 1'b0, overflow;
  node_id_t      wdata = '0, rdata;
  logic [AW-1:0] raddr = '0;
  logic [AW:0]   count;
  int checks = 0, failures = 0;

  result_ram #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  function automatic node_id_t id(input int i, input int salt);
    return node_id_t'(i * 7919 + salt * 104729 + 13);
  endfunction

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

  task automatic fill(input int n, input int salt);
    int w = 0;
    while (w < n) begin
      if ($urandom_range(0, 3) != 0) begin
        we = 1'b1; wdata = id(w, salt); w++;
      end else we = 1'b0;
      @(posedge clk); #1;
    end
    we = 1'b0;
  endtask

  task automatic readback(input int n, input int salt);
    for (int i = 0; i < n; i++) begin
      raddr = AW'(i);
      @(posedge clk); #1;
      check(rdata == id(i, salt), $sformatf("entry %0d: %h expected %h", i, rdata, id(i, salt)));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    fill(100, 1);
    check(int'(count) == 100 && !overflow, $sformatf("count %0d after 100", count));
    readback(100, 1);
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    check(count == '0 && !overflow, "clear");
    fill(DEPTH + 20, 2);
    check(int'(count) == DEPTH, $sformatf("count %0d when full", count));
    check(overflow, "overflow not flagged");
    readback(DEPTH, 2);
    clear = 1'b1; @(posedge clk); #1; clear = 1'b0;
    check(!overflow && count == '0, "overflow cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
