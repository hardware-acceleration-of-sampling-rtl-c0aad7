// large_sampler: sampling module for graphs streamed from off-chip memory.
//
// Large graphs (NELL, ogbn-arxiv, Reddit) do not fit in block RAM, so their lists
// arrive in node order over a 1024-bit input port, one word per node: up to 56
// neighbour IDs of 18 bits and the node's degree. Nodes with more than 56
// neighbours keep only their first 56; the published evaluation shows this costs no
// accuracy. For each node the module draws num_neighbors samples, one per clock:
// a 16-bit LFSR number is reduced to r mod min(d, 56) by the parallel modulo group
// and then selects one of the node's neighbour registers. This is the published
// large-dataset sampler.
//
// Own choices: the valid/ready input handshake; two neighbour register banks
// (NBANKS) that are filled alternately. The modulo group returns a result 8 clocks
// after the request, so the registers of a node must outlive its last request by 8
// clocks while the next node's requests are already being issued; with two banks
// and num_neighbors >= 9 (15 in the published experiments) no clock is lost
// between nodes, matching the published one sample per clock. With fewer
// neighbours, or when the input word is late, the controller stalls.
//
// Timing: request issued in clock t (first request of a node = word accepted in
// clock t), sampled ID on `out_nbr_id` with `out_valid` in clock t+9. `done` pulses
// the clock after the last output. Degree-0 nodes give `out_skip` instead of
// `out_valid`; `out_clipped` marks samples of nodes whose degree exceeded 56.
module large_sampler
  import concat_pkg::*;
#(
  parameter int unsigned NBANKS = 2,
  parameter rand_t       SEED   = 16'hACE1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // run control
  input  logic                  start,
  input  logic [NODE_CNT_W-1:0] num_nodes,
  input  logic [NBR_CNT_W-1:0]  num_neighbors,
  input  node_id_t              first_node,
  output logic                  busy,
  output logic                  done,
  // random number seed
  input  logic                  seed_we,
  input  rand_t                 seed,
  // streamed node words
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [BUS_W-1:0]      in_data,
  // sampled neighbours
  output logic                  out_valid,
  output node_id_t              out_node_id,
  output node_id_t              out_nbr_id,
  output logic                  out_skip,
  output logic                  out_clipped
);

  localparam int unsigned BW       = (NBANKS > 1) ? $clog2(NBANKS) : 1;
  localparam int unsigned PIPE_LAT = MOD_LATENCY + 1;

  typedef struct packed {
    logic [BW-1:0]         bank;
    logic [NODE_CNT_W-1:0] node;
    logic                  last;
    logic                  zero;
    logic                  clipped;
  } mod_tag_t;

  // ---------------- control ----------------
  logic                  run_start, ctrl_busy, ctrl_done, issue, first, last, stall;
  logic [NODE_CNT_W-1:0] node_idx;
  logic [NBR_CNT_W-1:0]  sample_idx;
  node_id_t              first_node_q;
  logic [PIPE_LAT-1:0]   done_pipe;

  assign run_start = start && !busy;

  sample_ctrl u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (run_start),
    .num_nodes    (num_nodes),
    .num_neighbors(num_neighbors),
    .stall        (stall),
    .busy         (ctrl_busy),
    .issue        (issue),
    .node_idx     (node_idx),
    .sample_idx   (sample_idx),
    .first        (first),
    .last         (last),
    .done         (ctrl_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_node_q <= '0;
      done_pipe    <= '0;
    end else begin
      if (run_start) first_node_q <= first_node;
      done_pipe <= {done_pipe[PIPE_LAT-2:0], ctrl_done};
    end
  end

  assign busy = ctrl_busy || (done_pipe[PIPE_LAT-2:0] != '0) || ctrl_done;
  assign done = done_pipe[PIPE_LAT-1];

  // ---------------- input word acceptance and bank allocation ----------------
  logic [NBANKS-1:0] bank_busy;
  logic [BW-1:0]     wr_bank, cur_bank, req_bank;
  degree_t           cur_deg, req_deg, word_deg;
  logic              accept;

  assign word_deg = in_data[WORD_DEG_LSB +: DEG_W];
  assign in_ready = ctrl_busy && first && !bank_busy[wr_bank];
  assign stall    = first && !(in_valid && !bank_busy[wr_bank]);
  assign accept   = issue && first;

  assign req_deg  = first ? word_deg : cur_deg;
  assign req_bank = first ? wr_bank  : cur_bank;

  // ---------------- random number, clip, modulo ----------------
  rand_t    rnd;
  degree_t  divisor;
  mod_tag_t in_tag, out_tag;
  logic     mod_valid;
  degree_t  mod_rem;

  lfsr16 #(.SEED(SEED)) u_rng (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (issue),
    .seed_we(seed_we),
    .seed   (seed),
    .r      (rnd)
  );

  assign divisor = (req_deg > DEG_W'(LARGE_NBRS)) ? DEG_W'(LARGE_NBRS) : req_deg;
  assign in_tag  = '{bank:    req_bank,
                     node:    node_idx,
                     last:    last,
                     zero:    (req_deg == '0),
                     clipped: (req_deg > DEG_W'(LARGE_NBRS))};

  parallel_modulo #(.TAG_W($bits(mod_tag_t))) u_mod (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (issue),
    .dividend (rnd),
    .divisor  (divisor),
    .in_tag   (in_tag),
    .out_valid(mod_valid),
    .out_rem  (mod_rem),
    .out_tag  (out_tag)
  );

  // ---------------- neighbour register banks ----------------
  node_id_t bank_id  [NBANKS];
  degree_t  bank_deg [NBANKS];

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    neighbor_reg_bank u_regs (
      .clk   (clk),
      .rst_n (rst_n),
      .load  (accept && (wr_bank == BW'(b))),
      .word  (in_data),
      .sel   (mod_rem[5:0]),
      .nbr_id(bank_id[b]),
      .degree(bank_deg[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bank_busy <= '0;
      wr_bank   <= '0;
      cur_bank  <= '0;
      cur_deg   <= '0;
    end else begin
      if (mod_valid && out_tag.last) bank_busy[out_tag.bank] <= 1'b0;
      if (accept) begin
        bank_busy[wr_bank] <= 1'b1;
        wr_bank  <= (wr_bank == BW'(NBANKS - 1)) ? '0 : wr_bank + BW'(1);
        cur_bank <= wr_bank;
        cur_deg  <= word_deg;
      end
    end
  end

  // ---------------- output register ----------------
  logic [NODE_CNT_W-1:0] o_node;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_skip    <= 1'b0;
      out_clipped <= 1'b0;
      out_nbr_id  <= '0;
      o_node      <= '0;
    end else begin
      out_valid   <= mod_valid && !out_tag.zero;
      out_skip    <= mod_valid &&  out_tag.zero;
      out_clipped <= mod_valid &&  out_tag.clipped;
      out_nbr_id  <= bank_id[out_tag.bank];
      o_node      <= out_tag.node;
    end
  end

  assign out_node_id = first_node_q + NODE_ID_W'(o_node);

  // A bank is never reloaded while samples of its node are still in flight.
  assert property (@(posedge clk) disable iff (!rst_n) accept |-> !bank_busy[wr_bank])
    else $error("large_sampler: bank overwritten while in use");
  // The stored degree and the degree used for the divisor agree.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mod_valid |-> (bank_deg[out_tag.bank] > DEG_W'(LARGE_NBRS)) == out_tag.clipped)
    else $error("large_sampler: clip flag does not match the bank's degree");
  // Remainders always point inside the 56 registers.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mod_valid && !out_tag.zero |-> mod_rem < DEG_W'(LARGE_NBRS))
    else $error("large_sampler: remainder outside the neighbour registers");

endmodule
