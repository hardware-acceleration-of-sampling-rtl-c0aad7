// tb_workload_large: the streamed sampler on graphs of NELL, ogbn-arxiv and
// Reddit size.
//
// Three runs, one after another, through one large-graph sampler at its default
// configuration with 15 neighbours per node. Each run streams one 1024-bit word
// per node from a source that is always ready: 65,755 nodes (NELL), 169,343
// (ogbn-arxiv) and 232,965 (Reddit), the node counts of the published
// evaluation. Before each run the LFSR is reloaded with 0xACE1 through the seed
// port, so every run starts from the same random sequence.
//
// Degrees are synthetic but shaped like each graph: a heavy-tailed distribution
// whose mean is close to the graph's average degree (2 x edges / nodes: about 8,
// 14 and 492), one node with the graph's largest degree (assumed values: 3,000,
// 13,161 and 21,657), and one node in a thousand isolated. Neighbour IDs are a
// hash of (run, node, slot). Every sample is checked against the testbench's
// own model: LFSR recurrence, r mod min(d, 56), the hashed neighbour. Each run
// must take exactly nodes x 15 clocks from first to last sample, which at
// 250 MHz is 3.945 ms, 10.161 ms and 13.978 ms, the published hardware times.
// Each run must also show clipped nodes (degree above 56) and skipped slots
// (degree 0).
module tb_workload_large;
  import concat_pkg::*;

  localparam int K     = 15;
  localparam int NRUNS = 3;
  localparam int NNODES_OF [NRUNS] = '{65755, 169343, 232965};
  localparam int MEAN_OF   [NRUNS] = '{8, 14, 492};
  localparam int MAXDEG_OF [NRUNS] = '{3000, 13161, 21657};
  localparam real MS_OF    [NRUNS] = '{3.945, 10.161, 13.978};
  localparam int TOTAL_CLOCKS = (65755 + 169343 + 232965) * K;

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
  longint checks = 0, failures = 0;
  longint cycle = 0;

  large_sampler dut (.*);

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

  function automatic int hash(input int a, input int b);
    int unsigned h = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77;
    h = h ^ (h >> 15);
    h = h * 32'hC2B2AE3D;
    return int'(h ^ (h >> 13));
  endfunction

  int run = 0;  // index of the graph being streamed

  // Mix of short and long uniform ranges; mean about 9/8 x MEAN_OF[run].
  function automatic int degree_of(input int i);
    int unsigned h = hash(i, 999 + run);
    int m = MEAN_OF[run];
    if (i == 12345) return MAXDEG_OF[run];
    if (h % 1000 == 0) return 0;
    case (h % 8)
      0, 1, 2, 3, 4, 5: return 1 + int'((h >> 8) % m);
      6:                return 1 + int'((h >> 8) % (4 * m));
      default:          return 1 + int'((h >> 8) % (8 * m));
    endcase
  endfunction

  function automatic node_id_t nbr_of(input int i, input int k);
    return node_id_t'(int'($unsigned(hash(i + run * 300000, k)) % NNODES_OF[run]));
  endfunction

  function automatic logic [BUS_W-1:0] make_word(input int i);
    logic [BUS_W-1:0] w = '0;
    int d = degree_of(i);
    for (int k = 0; k < LARGE_NBRS; k++)
      w[NODE_ID_W*k +: NODE_ID_W] = (k < d) ? nbr_of(i, k) : '0;
    w[WORD_DEG_LSB +: DEG_W] = DEG_W'(d);
    return w;
  endfunction

  // Always-ready source, rewound at the start of every run.
  int src_i = 0;
  bit src_on = 0;
  always @(posedge clk) if (in_valid && in_ready) src_i <= src_i + 1;
  always @(negedge clk) begin
    in_valid <= src_on && (src_i < NNODES_OF[run]);
    in_data  <= (src_on && src_i < NNODES_OF[run]) ? make_word(src_i) : '0;
  end

  // Checker for the current run.
  rand_t  s = 16'hACE1;
  int     ci = 0, ck = 0;
  longint first_out = -1, last_out = -1, n_out = 0, n_clip = 0, n_skip = 0;
  bit     done_seen = 0;
  always @(negedge clk) if (rst_n) begin
    if (out_valid || out_skip) begin
      automatic int d  = degree_of(ci);
      automatic int dd = (d > LARGE_NBRS) ? LARGE_NBRS : d;
      automatic int r  = int'(s);
      s = lfsr_next(s);
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      n_out++;
      checks++;
      if (out_skip != (dd == 0) || out_clipped != (d > LARGE_NBRS) || int'(out_node_id) != ci ||
          (dd != 0 && out_nbr_id != nbr_of(ci, r % dd))) begin
        failures++;
        if (failures < 10) $display("FAIL: run %0d node %0d sample %0d: got %0d", run, ci, ck, out_nbr_id);
      end
      if (d > LARGE_NBRS) n_clip++;
      if (dd == 0) n_skip++;
      ck++;
      if (ck == K) begin ck = 0; ci++; end
    end
    if (done) done_seen = 1;
  end

  initial begin
    repeat (TOTAL_CLOCKS + 10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int g = 0; g < NRUNS; g++) begin
      automatic longint nn = longint'(NNODES_OF[g]);
      // reload the LFSR and rewind source and checker
      @(posedge clk); #1;
      run = g; src_i = 0; ci = 0; ck = 0; s = 16'hACE1;
      first_out = -1; last_out = -1; n_out = 0; n_clip = 0; n_skip = 0; done_seen = 0;
      seed_we = 1'b1; seed = 16'hACE1;
      @(posedge clk); #1;
      seed_we = 1'b0; src_on = 1;
      start = 1'b1; num_nodes = NODE_CNT_W'(NNODES_OF[g]); num_neighbors = NBR_CNT_W'(K); first_node = '0;
      @(posedge clk); #1;
      start = 1'b0;
      wait (done_seen);
      @(posedge clk); #1;
      src_on = 0;
      checks++;
      if (n_out != nn * K) begin failures++; $display("FAIL: run %0d: %0d samples", g, n_out); end
      checks++;
      if (last_out - first_out + 1 != nn * K) begin
        failures++; $display("FAIL: run %0d: %0d clocks for %0d samples", g, last_out - first_out + 1, n_out);
      end
      checks++;
      if ((real'(last_out - first_out + 1) / 250.0e3) - MS_OF[g] > 0.0005 ||
          MS_OF[g] - (real'(last_out - first_out + 1) / 250.0e3) > 0.0005) begin
        failures++; $display("FAIL: run %0d: time differs from %0.3f ms", g, MS_OF[g]);
      end
      checks++;
      if (n_clip == 0 || n_skip == 0) begin failures++; $display("FAIL: run %0d: no clipped or no isolated node", g); end
      $display("%0d nodes: %0d samples in %0d clocks (%0.3f ms at 250 MHz), %0d clipped, %0d skipped",
               nn, n_out, last_out - first_out + 1, real'(last_out - first_out + 1) / 250.0e3, n_clip, n_skip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
