// tb_concat_sampler_top: end-to-end testbench of the whole accelerator at its
// default size (16 small-graph modules, 4096-node / 16384-edge lists per module,
// the 1024-bit streamed engine).
//
// Small-graph engine, two runs. Each run generates a random graph, cuts it into
// 16 segments of consecutive nodes and loads them into the 16 modules, each at
// its own non-zero list base addresses; all modules are seeded with known values
// and started together with 15 neighbours per node. The 16 output streams are
// collected per module and concatenated in module order into the sample result
// of the whole graph, which is compared with the testbench's own prediction for
// the whole graph (LFSR model, prefix sums, r mod d). Every module must deliver
// its first sample 11 clocks after start and then one sample per clock. Run 1
// has Cora's size (2,708 nodes, about 12,000 directed edges, 170 nodes per
// module); run 2 has PubMed's (19,717 nodes, about 87,000 directed edges, 1,233
// nodes per module). Module 5's result RAM is read back after each run: in run 1
// it holds all of the module's samples, in run 2 only the first 4096 and its
// overflow flag is set.
//
// Streamed engine, running at the same time as run 1: 400 nodes with Reddit-like
// degrees (many above 56, a few 0) from a word source that has random gaps for
// part of the run; every sample is checked likewise.
//
// Mechanisms counted, each must occur at least once: degree-0 skips (both
// engines), degree clipping to 56, input stalls of the streamed engine, result
// RAM overflow, and every one of the eight modulo units of a module taking its
// turn.
module tb_concat_sampler_top;
  import concat_pkg::*;

  localparam int N_SMALL = 16, DAW = 12, EAW = 14, RAW = 12;
  localparam int K = 15;
  localparam int NRUNS = 2;
  localparam int GNODES_OF [NRUNS] = '{2708, 19717};
  localparam int SEG_OF    [NRUNS] = '{170, 1233};
  localparam int LNODES = 400, LFIRST = 100000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NBR_CNT_W-1:0]  num_neighbors = '0;
  logic                  sm_start      [N_SMALL];
  logic [NODE_CNT_W-1:0] sm_num_nodes  [N_SMALL];
  node_id_t              sm_first_node [N_SMALL];
  logic [DAW-1:0]        sm_x_d0       [N_SMALL];
  logic [EAW-1:0]        sm_x_e0       [N_SMALL];
  logic                  sm_busy       [N_SMALL];
  logic                  sm_done       [N_SMALL];
  logic                  sm_seed_we    [N_SMALL];
  rand_t                 sm_seed       [N_SMALL];
  logic                  sm_deg_we     [N_SMALL];
  logic [DAW-1:0]        sm_deg_waddr  [N_SMALL];
  degree_t               sm_deg_wdata  [N_SMALL];
  logic                  sm_edge_we    [N_SMALL];
  logic [EAW-1:0]        sm_edge_waddr [N_SMALL];
  node_id_t              sm_edge_wdata [N_SMALL];
  logic                  sm_out_valid  [N_SMALL];
  node_id_t              sm_out_node_id[N_SMALL];
  node_id_t              sm_out_nbr_id [N_SMALL];
  logic                  sm_out_skip   [N_SMALL];
  logic [RAW-1:0]        sm_res_raddr  [N_SMALL];
  node_id_t              sm_res_rdata  [N_SMALL];
  logic [RAW:0]          sm_res_count  [N_SMALL];
  logic                  sm_res_overflow[N_SMALL];
  logic                  lg_start = 1'b0, lg_busy, lg_done, lg_seed_we = 1'b0;
  logic [NODE_CNT_W-1:0] lg_num_nodes = '0;
  node_id_t              lg_first_node = '0;
  rand_t                 lg_seed = '0;
  logic                  lg_in_valid = 1'b0, lg_in_ready;
  logic [BUS_W-1:0]      lg_in_data = '0;
  logic                  lg_out_valid, lg_out_skip, lg_out_clipped;
  node_id_t              lg_out_node_id, lg_out_nbr_id;

  int checks = 0, failures = 0;
  int cycle = 0;

  concat_sampler_top dut (.*);

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

  function automatic rand_t seed_of(input int m);
    return rand_t'(32'h1000 + 977 * m + 1);
  endfunction

  // ---------------- graph and expectations ----------------
  int       gnodes, seg;    // size of the current small-engine run
  int       gdeg[];
  int       goff[];
  node_id_t gedges[$];
  int       ldeg[LNODES];
  node_id_t lids[LNODES][56];

  typedef struct { bit skip; bit clip; int node; int nbr; } exp_t;
  exp_t gexp[$];            // whole-graph expectation, in concatenated order
  exp_t lexp[$];
  exp_t got[N_SMALL][$];    // per-module streams as produced
  int   first_out[N_SMALL], last_out[N_SMALL], start_cycle;
  int   n_skip_small = 0, n_skip_large = 0, n_clip = 0, n_stall = 0, n_lg_out = 0, n_overflow = 0;
  int   unit_turns[N_MOD_UNITS];
  int   lg_done_seen = 0;
  int   sm_done_cnt = 0;
  bit   gaps = 1'b0;

  function automatic int seg_first(input int m); return m * seg; endfunction
  function automatic int seg_nodes(input int m);
    return (m == N_SMALL - 1) ? gnodes - (N_SMALL - 1) * seg : seg;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [BUS_W-1:0] make_word(input int i);
    logic [BUS_W-1:0] w = '0;
    for (int k = 0; k < 56; k++)
      for (int b = 0; b < 18; b++) w[18*k + b] = lids[i][k][b];
    for (int b = 0; b < 16; b++) w[1008 + b] = 1'(ldeg[i] >> b);
    return w;
  endfunction

  // streamed-word source with gaps in the second half of the run
  int src_i = 0;
  always @(posedge clk) if (lg_in_valid && lg_in_ready) src_i <= src_i + 1;
  always @(negedge clk) begin
    lg_in_valid <= (src_i < LNODES) && (!gaps || src_i < LNODES / 2 || $urandom_range(0, 2) != 0);
    lg_in_data  <= (src_i < LNODES) ? make_word(src_i) : '0;
  end

  // ---------------- monitors ----------------
  always @(negedge clk) if (rst_n) begin
    for (int m = 0; m < N_SMALL; m++) begin
      if (sm_out_valid[m] || sm_out_skip[m]) begin
        if (got[m].size() == 0) first_out[m] = cycle;
        last_out[m] = cycle;
        got[m].push_back('{skip: sm_out_skip[m], clip: 0, node: int'(sm_out_node_id[m]),
                           nbr: sm_out_valid[m] ? int'(sm_out_nbr_id[m]) : 0});
        if (sm_out_skip[m]) n_skip_small++;
      end
      if (sm_done[m]) sm_done_cnt++;
    end
    for (int u = 0; u < N_MOD_UNITS; u++)
      if (dut.g_small[0].u_small.u_mod.unit_start[u]) unit_turns[u]++;
    if (dut.u_large.ctrl_busy && dut.u_large.stall) n_stall++;
    if (lg_out_valid || lg_out_skip) begin
      exp_t e;
      n_lg_out++;
      if (lexp.size() == 0) check(1'b0, "unexpected streamed-engine output");
      else begin
        e = lexp.pop_front();
        check(lg_out_skip == e.skip && lg_out_clipped == e.clip, $sformatf("streamed flags, node %0d", e.node));
        check(int'(lg_out_node_id) == e.node, "streamed node id");
        if (!e.skip) check(int'(lg_out_nbr_id) == e.nbr,
                           $sformatf("streamed node %0d: %0d expected %0d", e.node, lg_out_nbr_id, e.nbr));
        if (e.skip) n_skip_large++;
        if (e.clip) n_clip++;
      end
    end
    if (lg_done) lg_done_seen++;
  end

  // ---------------- one small-engine run ----------------
  // Graph generation (Cora/PubMed-like degrees: mostly small, a few hubs, a few
  // isolated) and the whole-graph prediction; module m's part uses module m's seed.
  task automatic make_graph(input int run);
    rand_t s;
    gnodes = GNODES_OF[run];
    seg    = SEG_OF[run];
    gdeg   = new[gnodes];
    goff   = new[gnodes + 1];
    gedges.delete();
    gexp.delete();
    goff[0] = 0;
    for (int i = 0; i < gnodes; i++) begin
      if (i % 401 == 7)      gdeg[i] = 0;
      else if (i % 97 == 3)  gdeg[i] = $urandom_range(20, 168);
      else                   gdeg[i] = $urandom_range(1, 6);
      goff[i+1] = goff[i] + gdeg[i];
      for (int j = 0; j < gdeg[i]; j++) gedges.push_back(node_id_t'($urandom_range(0, gnodes - 1)));
    end
    for (int m = 0; m < N_SMALL; m++) begin
      s = seed_of(m + 16 * run);
      for (int i = seg_first(m); i < seg_first(m) + seg_nodes(m); i++)
        for (int k = 0; k < K; k++) begin
          automatic int r = int'(s);
          s = lfsr_next(s);
          if (gdeg[i] == 0) gexp.push_back('{skip: 1, clip: 0, node: i, nbr: 0});
          else gexp.push_back('{skip: 0, clip: 0, node: i, nbr: int'(gedges[goff[i] + r % gdeg[i]])});
        end
    end
  endtask

  // Load all 16 segments in parallel: module m's lists at x_d0 = m, x_e0 = 3m.
  task automatic load_segments();
    automatic int emax = 0;
    for (int m = 0; m < N_SMALL; m++) begin
      automatic int ne = goff[seg_first(m) + seg_nodes(m)] - goff[seg_first(m)];
      if (ne > emax) emax = ne;
    end
    for (int t = 0; t < emax; t++) begin
      for (int m = 0; m < N_SMALL; m++) begin
        automatic int f = seg_first(m), n = seg_nodes(m);
        automatic int ne = goff[f + n] - goff[f];
        sm_deg_we[m]  = (t < n);
        sm_deg_waddr[m] = DAW'(m + t);
        sm_deg_wdata[m] = (t < n) ? degree_t'(gdeg[f + t]) : '0;
        sm_edge_we[m] = (t < ne);
        sm_edge_waddr[m] = EAW'(3 * m + t);
        sm_edge_wdata[m] = (t < ne) ? gedges[goff[f] + t] : '0;
      end
      @(posedge clk); #1;
    end
    for (int m = 0; m < N_SMALL; m++) begin
      sm_deg_we[m] = 0; sm_edge_we[m] = 0;
    end
  endtask

  // Concatenate the module streams in module order and compare with the whole graph.
  task automatic check_run(input int run);
    exp_t final_result[$];
    automatic int errs = 0;
    for (int m = 0; m < N_SMALL; m++) begin
      check(got[m].size() == seg_nodes(m) * K, $sformatf("run %0d module %0d produced %0d", run, m, got[m].size()));
      check(first_out[m] - start_cycle == 11, $sformatf("run %0d module %0d first output after %0d clocks", run, m, first_out[m] - start_cycle));
      check(last_out[m] - first_out[m] == seg_nodes(m) * K - 1, $sformatf("run %0d module %0d not one sample per clock", run, m));
      foreach (got[m][j]) final_result.push_back(got[m][j]);
    end
    check(final_result.size() == gexp.size(), "concatenated result size");
    foreach (gexp[j]) begin
      if (j < final_result.size()) begin
        automatic bit ok = final_result[j].skip == gexp[j].skip && final_result[j].node == gexp[j].node &&
                 final_result[j].nbr == gexp[j].nbr;
        if (!ok && errs++ < 5)
          $display("run %0d sample %0d: node %0d got %0d expected node %0d %0d", run, j, final_result[j].node,
                   final_result[j].nbr, gexp[j].node, gexp[j].nbr);
        check(ok, "");
      end
    end
    // result RAM of module 5 holds its first non-skipped samples in order
    begin
      automatic int j = 0, stored = 0;
      foreach (got[5][i]) if (!got[5][i].skip) stored++;
      check(sm_res_overflow[5] == (stored > 4096), $sformatf("run %0d module 5 overflow flag", run));
      if (sm_res_overflow[5]) n_overflow++;
      if (stored > 4096) stored = 4096;
      foreach (got[5][i]) if (!got[5][i].skip && j < stored) begin
        sm_res_raddr[5] = RAW'(j);
        @(posedge clk); #1;
        check(int'(sm_res_rdata[5]) == got[5][i].nbr, $sformatf("run %0d module 5 result RAM entry %0d", run, j));
        j++;
      end
      check(int'(sm_res_count[5]) == stored, $sformatf("run %0d module 5 result count", run));
    end
    $display("run %0d: %0d nodes over %0d modules, %0d samples, %0d clocks per module",
             run, gnodes, N_SMALL, final_result.size(), last_out[0] - first_out[0] + 1);
  endtask

  // ---------------- stimulus ----------------
  initial begin
    rand_t s;
    for (int i = 0; i < LNODES; i++) begin
      ldeg[i] = (i % 50 == 9) ? 0 : (i % 3 == 0) ? $urandom_range(57, 21657) : $urandom_range(1, 56);
      for (int k = 0; k < 56; k++) lids[i][k] = node_id_t'($urandom_range(0, 232964));
    end
    s = 16'hBEEF;
    for (int i = 0; i < LNODES; i++)
      for (int k = 0; k < K; k++) begin
        automatic int r = int'(s);
        automatic int dd = (ldeg[i] > 56) ? 56 : ldeg[i];
        s = lfsr_next(s);
        if (dd == 0) lexp.push_back('{skip: 1, clip: 0, node: LFIRST + i, nbr: 0});
        else lexp.push_back('{skip: 0, clip: ldeg[i] > 56, node: LFIRST + i, nbr: int'(lids[i][r % dd])});
      end
    for (int u = 0; u < N_MOD_UNITS; u++) unit_turns[u] = 0;

    for (int m = 0; m < N_SMALL; m++) begin
      sm_start[m] = 0; sm_num_nodes[m] = '0; sm_first_node[m] = '0; sm_x_d0[m] = '0; sm_x_e0[m] = '0;
      sm_seed_we[m] = 0; sm_seed[m] = '0; sm_deg_we[m] = 0; sm_deg_waddr[m] = '0; sm_deg_wdata[m] = '0;
      sm_edge_we[m] = 0; sm_edge_waddr[m] = '0; sm_edge_wdata[m] = '0; sm_res_raddr[m] = '0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    for (int run = 0; run < NRUNS; run++) begin
      make_graph(run);
      load_segments();
      for (int m = 0; m < N_SMALL; m++) begin
        sm_seed_we[m] = 1; sm_seed[m] = seed_of(m + 16 * run);
        got[m].delete();
      end
      sm_done_cnt = 0;
      if (run == 0) begin lg_seed_we = 1'b1; lg_seed = 16'hBEEF; end
      @(posedge clk); #1;
      lg_seed_we = 1'b0;
      // start everything
      num_neighbors = NBR_CNT_W'(K);
      for (int m = 0; m < N_SMALL; m++) begin
        sm_seed_we[m] = 0;
        sm_start[m] = 1; sm_num_nodes[m] = NODE_CNT_W'(seg_nodes(m));
        sm_first_node[m] = node_id_t'(seg_first(m));
        sm_x_d0[m] = DAW'(m); sm_x_e0[m] = EAW'(3 * m);
      end
      if (run == 0) begin
        lg_start = 1'b1; lg_num_nodes = NODE_CNT_W'(LNODES); lg_first_node = node_id_t'(LFIRST);
        gaps = 1'b1;
      end
      start_cycle = cycle;
      @(posedge clk); #1;
      for (int m = 0; m < N_SMALL; m++) sm_start[m] = 0;
      lg_start = 1'b0;
      wait (sm_done_cnt == N_SMALL && (run != 0 || lg_done_seen == 1));
      @(posedge clk); #1;
      check_run(run);
    end
    check(n_lg_out == LNODES * K && lexp.size() == 0, $sformatf("streamed engine produced %0d", n_lg_out));

    // mechanisms
    $display("mechanisms: small skips=%0d large skips=%0d clips=%0d stalls=%0d result overflows=%0d",
             n_skip_small, n_skip_large, n_clip, n_stall, n_overflow);
    check(n_skip_small > 0, "no degree-0 skip in the small-graph modules");
    check(n_skip_large > 0, "no degree-0 skip in the streamed engine");
    check(n_clip > 0, "no degree clipped to 56");
    check(n_stall > 0, "no stall of the streamed engine");
    check(n_overflow > 0, "no result RAM overflow");
    for (int u = 0; u < N_MOD_UNITS; u++) begin
      $display("module 0 modulo unit %0d: %0d turns", u, unit_turns[u]);
      check(unit_turns[u] > 0, $sformatf("modulo unit %0d never took a turn", u));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
