// small_sampler: sampling module for graphs whose lists fit on chip.
//
// For each node of its graph segment, in node order, the module draws
// num_neighbors neighbours uniformly (with replacement) and emits their IDs, one
// per clock with no gaps between nodes. Per sample it (1) takes a 16-bit number r
// from the LFSR, (2) reduces it to r mod d_i with the parallel modulo group, d_i
// being the node's degree from the degree list, and (3) reads the edge list at
// x_ei + (r mod d_i), where x_ei is the running-sum base address of node i's
// neighbours. This is the published small-dataset sampler; the pipeline below, the
// memory depths, the output format and the handling of degree-0 nodes are this
// design's choices.
//
// Pipeline, for a request issued by the controller in clock t:
//   t      degree list read at x_d0 + i
//   t+1    degree arrives; LFSR value and degree enter the modulo group together
//          with the node's base address x_ei (the base then moves on by d_i if
//          this was the node's last sample)
//   t+9    remainder leaves the modulo group; edge list read at x_ei + rem
//   t+10   sampled ID on `out_nbr_id` with `out_valid`; also appended to the
//          result RAM
// A run of N nodes and K neighbours therefore takes N*K + 10 clocks to its last
// output; `done` pulses the clock after that.
//
// A node of degree 0 has no neighbour to sample: its K slots produce `out_skip`
// pulses instead of `out_valid` (the published text does not cover this case).
//
// Interface: load the lists through the two write ports while idle, then pulse
// `start` with `num_nodes`, `num_neighbors`, `first_node` (global ID of the
// segment's node 0, used only to label outputs), `x_d0` and `x_e0` (base addresses
// of the segment in the two lists). `seed_we` reseeds the LFSR. The result RAM is
// cleared by `start` and read through `res_raddr`/`res_rdata` (one clock latency).
module small_sampler
  import concat_pkg::*;
#(
  parameter int unsigned DEG_DEPTH    = 4096,
  parameter int unsigned EDGE_DEPTH   = 16384,
  parameter int unsigned RESULT_DEPTH = 4096,
  parameter rand_t       SEED         = 16'hACE1,
  localparam int unsigned DAW = $clog2(DEG_DEPTH),
  localparam int unsigned EAW = $clog2(EDGE_DEPTH),
  localparam int unsigned RAW = $clog2(RESULT_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // run control
  input  logic                  start,
  input  logic [NODE_CNT_W-1:0] num_nodes,
  input  logic [NBR_CNT_W-1:0]  num_neighbors,
  input  node_id_t              first_node,
  input  logic [DAW-1:0]        x_d0,
  input  logic [EAW-1:0]        x_e0,
  output logic                  busy,
  output logic                  done,
  // random number seed
  input  logic                  seed_we,
  input  rand_t                 seed,
  // degree list and edge list loading
  input  logic                  deg_we,
  input  logic [DAW-1:0]        deg_waddr,
  input  degree_t               deg_wdata,
  input  logic                  edge_we,
  input  logic [EAW-1:0]        edge_waddr,
  input  node_id_t              edge_wdata,
  // sampled neighbours, one per clock
  output logic                  out_valid,
  output node_id_t              out_node_id,
  output node_id_t              out_nbr_id,
  output logic                  out_skip,
  // result RAM read-back
  input  logic [RAW-1:0]        res_raddr,
  output node_id_t              res_rdata,
  output logic [RAW:0]          res_count,
  output logic                  res_overflow
);

  localparam int unsigned PIPE_LAT = 1 + MOD_LATENCY + 1;

  typedef struct packed {
    logic [EAW-1:0]        base;
    logic [NODE_CNT_W-1:0] node;
    logic                  zero;
  } mod_tag_t;

  // ---------------- control ----------------
  logic                  run_start;
  logic                  ctrl_busy, ctrl_done, issue, last;
  logic [NODE_CNT_W-1:0] node_idx;
  logic [NBR_CNT_W-1:0]  sample_idx;
  logic                  ctrl_first;
  logic [DAW-1:0]        x_d0_q;
  node_id_t              first_node_q;
  logic [PIPE_LAT-1:0]   done_pipe;

  assign run_start = start && !busy;

  sample_ctrl u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (run_start),
    .num_nodes    (num_nodes),
    .num_neighbors(num_neighbors),
    .stall        (1'b0),
    .busy         (ctrl_busy),
    .issue        (issue),
    .node_idx     (node_idx),
    .sample_idx   (sample_idx),
    .first        (ctrl_first),
    .last         (last),
    .done         (ctrl_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_d0_q       <= '0;
      first_node_q <= '0;
      done_pipe    <= '0;
    end else begin
      if (run_start) begin
        x_d0_q       <= x_d0;
        first_node_q <= first_node;
      end
      done_pipe <= {done_pipe[PIPE_LAT-2:0], ctrl_done};
    end
  end

  assign busy = ctrl_busy || (done_pipe[PIPE_LAT-2:0] != '0) || ctrl_done;
  assign done = done_pipe[PIPE_LAT-1];

  // ---------------- stage t: degree list read ----------------
  degree_t               deg_rdata;
  logic                  s1_valid, s1_last;
  logic [NODE_CNT_W-1:0] s1_node;

  degree_list_ram #(.DEPTH(DEG_DEPTH)) u_deg (
    .clk  (clk),
    .we   (deg_we),
    .waddr(deg_waddr),
    .wdata(deg_wdata),
    .re   (issue),
    .raddr(x_d0_q + DAW'(node_idx)),
    .rdata(deg_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_last  <= 1'b0;
      s1_node  <= '0;
    end else begin
      s1_valid <= issue;
      s1_last  <= last;
      s1_node  <= node_idx;
    end
  end

  // ---------------- stage t+1: random number, base address, modulo ----------------
  rand_t          rnd;
  logic [EAW-1:0] base;
  mod_tag_t       in_tag, out_tag;
  logic           mod_valid;
  degree_t        mod_rem;

  lfsr16 #(.SEED(SEED)) u_rng (
    .clk    (clk),
    .rst_n  (rst_n),
    .en     (s1_valid),
    .seed_we(seed_we),
    .seed   (seed),
    .r      (rnd)
  );

  base_addr_unit #(.AW(EAW)) u_base (
    .clk    (clk),
    .rst_n  (rst_n),
    .init   (run_start),
    .x_e0   (x_e0),
    .advance(s1_valid && s1_last),
    .degree (deg_rdata),
    .base   (base)
  );

  assign in_tag = '{base: base, node: s1_node, zero: (deg_rdata == '0)};

  parallel_modulo #(.TAG_W($bits(mod_tag_t))) u_mod (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (s1_valid),
    .dividend (rnd),
    .divisor  (deg_rdata),
    .in_tag   (in_tag),
    .out_valid(mod_valid),
    .out_rem  (mod_rem),
    .out_tag  (out_tag)
  );

  // ---------------- stage t+9: edge list read at x_ei + r ----------------
  logic                  s10_valid, s10_skip;
  logic [NODE_CNT_W-1:0] s10_node;

  edge_list_ram #(.DEPTH(EDGE_DEPTH)) u_edge (
    .clk  (clk),
    .we   (edge_we),
    .waddr(edge_waddr),
    .wdata(edge_wdata),
    .re   (mod_valid && !out_tag.zero),
    .raddr(out_tag.base + EAW'(mod_rem)),
    .rdata(out_nbr_id)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s10_valid <= 1'b0;
      s10_skip  <= 1'b0;
      s10_node  <= '0;
    end else begin
      s10_valid <= mod_valid && !out_tag.zero;
      s10_skip  <= mod_valid &&  out_tag.zero;
      s10_node  <= out_tag.node;
    end
  end

  // ---------------- stage t+10: output ----------------
  assign out_valid   = s10_valid;
  assign out_skip    = s10_skip;
  assign out_node_id = first_node_q + NODE_ID_W'(s10_node);

  result_ram #(.DEPTH(RESULT_DEPTH)) u_res (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (run_start),
    .we      (s10_valid),
    .wdata   (out_nbr_id),
    .raddr   (res_raddr),
    .rdata   (res_rdata),
    .count   (res_count),
    .overflow(res_overflow)
  );

endmodule
