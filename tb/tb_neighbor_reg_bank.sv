// tb_neighbor_reg_bank: self-checking testbench for the 56 neighbour registers.
//
// Builds random 1024-bit words field by field (neighbour k in bits 18k+17..18k,
// degree in bits 1023..1008), loads them, and checks every one of the 56 selector
// positions and the degree; checks that the registers hold their contents while
// `load` is low.
module tb_neighbor_reg_bank;
  import concat_pkg::*;

  logic             clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [BUS_W-1:0] word = '0;
  logic [5:0]       sel = '0;
  node_id_t         nbr_id;
  degree_t          degree;
  int checks = 0, failures = 0;

  neighbor_reg_bank dut (.*);

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
    node_id_t ids[56];
    degree_t  d;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int w = 0; w < 50; w++) begin
      d = degree_t'($urandom_range(0, 3000));
      for (int k = 0; k < 56; k++) ids[k] = node_id_t'($urandom_range(0, 232964));
      word = '0;
      for (int k = 0; k < 56; k++)
        for (int b = 0; b < 18; b++) word[k*18 + b] = ids[k][b];
      for (int b = 0; b < 16; b++) word[1008 + b] = d[b];
      load = 1'b1;
      @(posedge clk); #1;
      load = 1'b0;
      word = ~word;   // registers must ignore the bus now
      check(degree == d, $sformatf("degree %0d expected %0d", degree, d));
      for (int k = 0; k < 56; k++) begin
        sel = 6'(k);
        #1 check(nbr_id == ids[k], $sformatf("word %0d neighbour %0d: %0d expected %0d", w, k, nbr_id, ids[k]));
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
