// tb_small_sampler: self-checking testbench for the on-chip (small-graph) sampler.
//
// Builds a random graph segment in the testbench (degrees 0..12, some nodes of
// degree 0, random neighbour IDs), loads its degree and edge lists at non-zero base
// addresses x_d0 and x_e0, and runs the sampler. The expected stream is worked out
// independently: an LFSR model gives the j-th random number, the testbench's own
// prefix sum of degrees gives each node's neighbour range, and the neighbour at
// offset (r mod d) is looked up in the testbench's copy of the edge list. Checks:
// every sampled ID and node ID, `out_skip` for degree-0 nodes, one result per clock
// with no gaps between nodes, first result 11 clocks after `start`, `done` one
// clock after the last result, the result RAM's contents, its overflow flag on a
// run larger than the RAM, and that `start` is ignored while busy.
module tb_small_sampler;
  import concat_pkg::*;

  localparam int DEG_DEPTH = 64, EDGE_DEPTH = 512, RESULT_DEPTH = 256;
  localparam int DAW = $clog2(DEG_DEPTH), EAW = $clog2(EDGE_DEPTH), RAW = $clog2(RESULT_DEPTH);
  localparam int NNODES = 40, XD0 = 5, XE0 = 17, FIRST = 1000;

  logic                  clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [NODE_CNT_W-1:0] num_nodes = '0;
  logic [NBR_CNT_W-1:0]  num_neighbors = '0;
  node_id_t              first_node = '0;
  logic [DAW-1:0]        x_d0 = '0;
  logic [EAW-1:0]        x_e0 = '0;
  logic                  seed_we = 1'b0;
  rand_t                 seed = '0;
  logic                  deg_we = 1'b0, edge_we = 1'b0;
  logic [DAW-1:0]        deg_waddr = '0;
  degree_t               deg_wdata = '0;
  logic [EAW-1:0]        edge_waddr = '0;
  node_id_t              edge_wdata = '0;
  logic                  out_valid, out_skip, res_overflow;
  node_id_t              out_node_id, out_nbr_id, res_rdata;
  logic [RAW-1:0]        res_raddr = '0;
  logic [RAW:0]          res_count;
  int checks = 0, failures = 0;
  int cycle = 0;

  small_sampler #(.DEG_DEPTH(DEG_DEPTH), .EDGE_DEPTH(EDGE_DEPTH), .RESULT_DEPTH(RESULT_DEPTH),
                  .SEED(16'hACE1)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic rand_t lfsr_next(input rand_t s);
    rand_t n;
    for (int i = 0; i < 15; i++) n[i] = s[i+1];
    n[15] = s[0];
    n[13] = s[14] ^ s[0];
    n[12] = s[13] ^ s[0];
    n[10] = s[11] ^ s[0];
    return n;
  endfunction

  int       deg[NNODES];
  node_id_t edges[$];
  rand_t    lfsr_s = 16'hACE1;

  typedef struct { bit skip; int node; int nbr; } exp_t;
  exp_t exp_q[$];
  int   nbr_log[$];
  int   first_out_cycle, last_out_cycle, done_cycle, n_out, n_skip;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected stream for one run, from the testbench's own copy of the graph.
  task automatic predict(input int k);
    int base = 0;
    for (int i = 0; i < NNODES; i++) begin
      for (int s = 0; s < k; s++) begin
        int r = int'(lfsr_s);
        lfsr_s = lfsr_next(lfsr_s);
        if (deg[i] == 0) exp_q.push_back('{skip: 1, node: FIRST + i, nbr: 0});
        else exp_q.push_back('{skip: 0, node: FIRST + i, nbr: int'(edges[base + r % deg[i]])});
      end
      base += deg[i];
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (out_valid || out_skip) begin
      exp_t e;
      if (n_out == 0) first_out_cycle = cycle;
      last_out_cycle = cycle;
      n_out++;
      if (exp_q.size() == 0) check(1'b0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        check(out_skip == e.skip && out_valid == !e.skip, $sformatf("skip flag, node %0d", e.node));
        check(int'(out_node_id) == e.node, $sformatf("node id %0d expected %0d", out_node_id, e.node));
        if (!e.skip) begin
          check(int'(out_nbr_id) == e.nbr, $sformatf("node %0d sample %0d expected %0d", e.node, out_nbr_id, e.nbr));
          nbr_log.push_back(int'(out_nbr_id));
        end else n_skip++;
      end
    end
    if (done) done_cycle = cycle;
  end

  task automatic run(input int k);
    int start_cycle;
    predict(k);
    n_out = 0; n_skip = 0; done_cycle = -1;
    nbr_log.delete();
    start = 1'b1; num_nodes = NODE_CNT_W'(NNODES); num_neighbors = NBR_CNT_W'(k);
    first_node = node_id_t'(FIRST); x_d0 = DAW'(XD0); x_e0 = EAW'(XE0);
    start_cycle = cycle;
    @(posedge clk); #1;
    start = 1'b0;
    // a second start while busy must be ignored
    repeat (3) @(posedge clk); #1;
    start = 1'b1; num_nodes = NODE_CNT_W'(1);
    @(posedge clk); #1;
    start = 1'b0;
    wait (done_cycle >= 0);
    @(posedge clk); #1;
    check(n_out == NNODES * k, $sformatf("outputs %0d expected %0d", n_out, NNODES * k));
    check(exp_q.size() == 0, "expected outputs missing");
    check(first_out_cycle - start_cycle == 11, $sformatf("first output %0d clocks after start", first_out_cycle - start_cycle));
    check(last_out_cycle - first_out_cycle == NNODES * k - 1, "outputs not one per clock");
    check(done_cycle == last_out_cycle + 1, "done not one clock after last output");
    check(n_skip > 0, "no degree-0 node sampled");
    check(!busy, "busy after done");
  endtask

  initial begin
    for (int i = 0; i < NNODES; i++) begin
      deg[i] = (i % 9 == 4) ? 0 : $urandom_range(1, 12);
      for (int j = 0; j < deg[i]; j++) edges.push_back(node_id_t'($urandom_range(0, 19716)));
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // load lists at their base addresses
    for (int i = 0; i < NNODES; i++) begin
      deg_we = 1'b1; deg_waddr = DAW'(XD0 + i); deg_wdata = degree_t'(deg[i]);
      @(posedge clk); #1;
    end
    deg_we = 1'b0;
    foreach (edges[j]) begin
      edge_we = 1'b1; edge_waddr = EAW'(XE0 + j); edge_wdata = edges[j];
      @(posedge clk); #1;
    end
    edge_we = 1'b0;
    // run 1: 3 neighbours per node, result RAM holds everything
    run(3);
    check(int'(res_count) == nbr_log.size() && !res_overflow, $sformatf("result count %0d", res_count));
    foreach (nbr_log[j]) begin
      res_raddr = RAW'(j);
      @(posedge clk); #1;
      check(int'(res_rdata) == nbr_log[j], $sformatf("result RAM entry %0d", j));
    end
    // run 2: 15 neighbours per node, more samples than the result RAM holds
    run(15);
    check(int'(res_count) == RESULT_DEPTH && res_overflow, "result RAM overflow");
    // reseed and run again
    seed_we = 1'b1; seed = 16'h5A5A;
    @(posedge clk); #1;
    seed_we = 1'b0;
    lfsr_s = 16'h5A5A;
    run(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
