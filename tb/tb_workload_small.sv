// tb_workload_small: one small-graph sampling module on graphs of the sizes of
// the evaluated small datasets.
//
// Three random graphs with exactly the node and directed-edge counts of Cora
// (2,708 nodes, 2 x 5,429 edges), Citeseer (3,327, 2 x 4,732) and one sixteenth of
// PubMed (1,233 nodes, 5,542 edges, the share of one of 16 parallel modules) are
// loaded in turn into one module at its default size and sampled with 15
// neighbours per node. Every sample is checked against the testbench's model
// (LFSR model, prefix sums, r mod d), and each run must take nodes x 15 clocks
// from first to last sample (Cora: 40,620 clocks = 0.162 ms at 250 MHz).
module tb_workload_small;
  import concat_pkg::*;

  localparam int DAW = 12, EAW = 14, RAW = 12, K = 15;

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

  small_sampler dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic rand_t lfsr_next(input rand_t s);
    rand_t n;
    for (int i = 0; i < 15; i++) n[i] = s[i+1];
    n[15] = s[0];
    n[13] = s[14] ^ s[0];
    n[12] = s[13] ^ s[0];
    n[10] = s[11] ^ s[0];
    return n;
  endfunction

  int       deg[$];
  int       off[$];
  node_id_t edges[$];
  rand_t    s_model = 16'hACE1;
  int       mi = 0, mk = 0, n_out = 0, first_out = -1, last_out = -1;
  bit       done_seen = 0;

  always @(negedge clk) if (rst_n) begin
    if (out_valid || out_skip) begin
      automatic int r = int'(s_model);
      s_model = lfsr_next(s_model);
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      n_out++;
      checks++;
      if (!out_valid || int'(out_node_id) != mi ||
          out_nbr_id != edges[off[mi] + r % deg[mi]]) begin
        failures++;
        if (failures < 10) $display("FAIL: node %0d sample %0d got %0d", mi, mk, out_nbr_id);
      end
      mk++;
      if (mk == K) begin mk = 0; mi++; end
    end
    if (done) done_seen = 1;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_graph(input string name, input int nn, input int ne);
    deg.delete(); off.delete(); edges.delete();
    for (int i = 0; i < nn; i++) deg.push_back(1);
    for (int e = nn; e < ne; e++) deg[$urandom_range(0, nn - 1)]++;
    off.push_back(0);
    for (int i = 0; i < nn; i++) begin
      off.push_back(off[i] + deg[i]);
      for (int j = 0; j < deg[i]; j++) edges.push_back(node_id_t'($urandom_range(0, 19716)));
    end
    for (int i = 0; i < nn; i++) begin
      deg_we = 1'b1; deg_waddr = DAW'(i); deg_wdata = degree_t'(deg[i]);
      @(posedge clk); #1;
    end
    deg_we = 1'b0;
    foreach (edges[j]) begin
      edge_we = 1'b1; edge_waddr = EAW'(j); edge_wdata = edges[j];
      @(posedge clk); #1;
    end
    edge_we = 1'b0;
    mi = 0; mk = 0; n_out = 0; first_out = -1; done_seen = 0;
    start = 1'b1; num_nodes = NODE_CNT_W'(nn); num_neighbors = NBR_CNT_W'(K);
    @(posedge clk); #1;
    start = 1'b0;
    wait (done_seen);
    @(posedge clk); #1;
    checks++;
    if (n_out != nn * K || last_out - first_out + 1 != nn * K) begin
      failures++;
      $display("FAIL: %s: %0d samples in %0d clocks", name, n_out, last_out - first_out + 1);
    end
    $display("%s-size graph: %0d nodes, %0d edges, %0d samples in %0d clocks (%0.4f ms at 250 MHz)",
             name, nn, ne, n_out, last_out - first_out + 1, real'(last_out - first_out + 1) / 250.0e3);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run_graph("Cora", 2708, 10858);
    run_graph("Citeseer", 3327, 9464);
    run_graph("PubMed/16", 1233, 5542);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
