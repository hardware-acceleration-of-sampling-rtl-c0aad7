// tb_degree_list_ram: self-checking testbench for the degree_list_ram block RAM.
//
// Fills the whole array through the write port with values from a hash of the
// address, then reads every address in random order through the read port and
// checks the data arrives one clock after the address. Also checks that the read
// register holds its value while the read enable is low and that a later write
// to one address changes only that address.
module tb_degree_list_ram;
  import concat_pkg::*;

  localparam int DEPTH = 4096;
  localparam int AW    = $clog2(DEPTH);

  logic          clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  degree_t       wdata = '0, rdata;
  int checks = 0, failures = 0;

  degree_list_ram #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  function automatic degree_t val(input int a, input int salt);
    return degree_t'((a * 2654435761 + salt * 40503) >> 7);
  endfunction

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
    int a;
    @(posedge clk); #1;
    for (int i = 0; i < DEPTH; i++) begin
      we = 1'b1; waddr = AW'(i); wdata = val(i, 0);
      @(posedge clk); #1;
    end
    we = 1'b0;
    for (int i = 0; i < 3000; i++) begin
      a = $urandom_range(0, DEPTH - 1);
      re = 1'b1; raddr = AW'(a);
      @(posedge clk); #1;
      check(rdata == val(a, 0), $sformatf("addr %0d: got %h expected %h", a, rdata, val(a, 0)));
    end
    // hold with re low
    re = 1'b0; raddr = AW'(a + 1);
    @(posedge clk); #1;
    check(rdata == val(a, 0), "read register changed with re low");
    // single overwrite
    we = 1'b1; waddr = AW'(5); wdata = val(5, 1);
    @(posedge clk); #1;
    we = 1'b0;
    re = 1'b1; raddr = AW'(5);
    @(posedge clk); #1;
    check(rdata == val(5, 1), "overwrite of address 5");
    raddr = AW'(6);
    @(posedge clk); #1;
    check(rdata == val(6, 0), "neighbour of overwritten address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
