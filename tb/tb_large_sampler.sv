// tb_large_sampler: self-checking testbench for the streamed (large-graph) sampler.
//
// A behavioural word source stands in for the off-chip memory: for each node it
// builds a 1024-bit word from a random degree (0, 1..56, or above 56) and random
// 18-bit neighbour IDs, placed field by field. The expected samples are worked out
// independently: the j-th LFSR number modulo min(d, 56) indexes the testbench's
// copy of the node's neighbour list. Checks: every sampled and node ID, `out_skip`
// for degree 0, `out_clipped` for degree above 56, first result 10 clocks after
// `start`, one result per clock with no gaps for 15 neighbours per node and an
// always-ready source (the published rate), correct results when the controller
// has to stall (3 neighbours per node, and a source with random gaps), and `done`
// one clock after the last result.
module tb_large_sampler;
  import concat_pkg::*;

  localparam int NNODES = 120, FIRST = 200000;

  logic                  clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [NODE_CNT_W-1:0] num_nodes = '0;
  logic [NBR_CNT_W-1:0]  num_neighbors = '0;
  node_id_t              first_node = '0;
  logic                  seed_we = 1'b0;
  rand_t                 seed = '0;
  logic                  in_valid = 1'b0, in_ready;
  logic [BUS_W-1:0]      in_data = '0;
  logic                  out_valid, out_skip, out_clipped;
  node_id_t              out_node_id, out_nbr_id;
  int checks = 0, failures = 0;
  int cycle = 0;

  large_sampler dut (.*);

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
  node_id_t ids[NNODES][56];
  rand_t    lfsr_s = 16'hACE1;

  typedef struct { bit skip; bit clip; int node; int nbr; } exp_t;
  exp_t exp_q[$];
  int   first_out_cycle, last_out_cycle, done_cycle, n_out, n_clip, n_skip, n_stall;
  bit   gaps;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [BUS_W-1:0] make_word(input int i);
    logic [BUS_W-1:0] w = '0;
    for (int k = 0; k < 56; k++)
      for (int b = 0; b < 18; b++) w[18*k + b] = ids[i][k][b];
    for (int b = 0; b < 16; b++) w[1008 + b] = 1'(deg[i] >> b);
    return w;
  endfunction

  task automatic predict(input int k);
    for (int i = 0; i < NNODES; i++)
      for (int s = 0; s < k; s++) begin
        int r = int'(lfsr_s);
        int dd = (deg[i] > 56) ? 56 : deg[i];
        lfsr_s = lfsr_next(lfsr_s);
        if (dd == 0) exp_q.push_back('{skip: 1, clip: 0, node: FIRST + i, nbr: 0});
        else exp_q.push_back('{skip: 0, clip: deg[i] > 56, node: FIRST + i, nbr: int'(ids[i][r % dd])});
      end
  endtask

  // word source: node words in order, optionally with random gaps
  int src_i;
  always @(posedge clk) begin
    if (in_valid && in_ready) src_i <= src_i + 1;
  end
  always @(negedge clk) begin
    in_valid <= (src_i < NNODES) && (!gaps || $urandom_range(0, 2) != 0);
    in_data  <= (src_i < NNODES) ? make_word(src_i) : '0;
  end

  always @(negedge clk) if (rst_n) begin
    if (dut.ctrl_busy && dut.stall) n_stall++;
    if (out_valid || out_skip) begin
      exp_t e;
      if (n_out == 0) first_out_cycle = cycle;
      last_out_cycle = cycle;
      n_out++;
      if (exp_q.size() == 0) check(1'b0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        check(out_skip == e.skip && out_valid == !e.skip, "skip flag");
        check(out_clipped == e.clip, $sformatf("clip flag, node %0d", e.node));
        check(int'(out_node_id) == e.node, $sformatf("node id %0d expected %0d", out_node_id, e.node));
        if (!e.skip) check(int'(out_nbr_id) == e.nbr, $sformatf("node %0d sample %0d expected %0d", e.node, out_nbr_id, e.nbr));
        if (e.skip) n_skip++;
        if (e.clip) n_clip++;
      end
    end
    if (done) done_cycle = cycle;
  end

  task automatic run(input int k, input bit with_gaps);
    int start_cycle;
    predict(k);
    n_out = 0; n_clip = 0; n_skip = 0; n_stall = 0; done_cycle = -1;
    gaps = with_gaps;
    src_i = 0;
    @(posedge clk); #1;
    start = 1'b1; num_nodes = NODE_CNT_W'(NNODES); num_neighbors = NBR_CNT_W'(k);
    first_node = node_id_t'(FIRST);
    start_cycle = cycle;
    @(posedge clk); #1;
    start = 1'b0;
    wait (done_cycle >= 0);
    @(posedge clk); #1;
    check(n_out == NNODES * k, $sformatf("outputs %0d expected %0d", n_out, NNODES * k));
    check(exp_q.size() == 0, "expected outputs missing");
    check(done_cycle == last_out_cycle + 1, "done not one clock after last output");
    check(n_clip > 0 && n_skip > 0, "no clipped or no degree-0 node");
    if (!with_gaps && k >= 9) begin
      check(first_out_cycle - start_cycle == 10, $sformatf("first output %0d clocks after start", first_out_cycle - start_cycle));
      check(last_out_cycle - first_out_cycle == NNODES * k - 1,
            $sformatf("%0d clocks for %0d samples", last_out_cycle - first_out_cycle + 1, NNODES * k));
      check(n_stall == 0, "stall with 15 neighbours and a ready source");
    end else begin
      check(n_stall > 0, "expected stalls did not happen");
    end
  endtask

  initial begin
    for (int i = 0; i < NNODES; i++) begin
      case (i % 5)
        0: deg[i] = (i % 15 == 0) ? 0 : $urandom_range(1, 5);
        1: deg[i] = $urandom_range(57, 21657);
        2: deg[i] = 56;
        default: deg[i] = $urandom_range(1, 56);
      endcase
      for (int k = 0; k < 56; k++) ids[i][k] = node_id_t'($urandom_range(0, 232964));
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    run(15, 1'b0);
    run(3, 1'b0);
    run(15, 1'b1);
    $display("stalls in last run: %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
