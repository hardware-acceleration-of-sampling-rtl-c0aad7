// concat_sampler_top: the CONCAT neighbour-sampling accelerator.
//
// The CONCAT sampler only ever samples 1-hop neighbourhoods in hardware; deeper
// computational graphs are built afterwards by concatenating those 1-hop samples,
// so the hardware never has to revisit the edge list with the results of an
// earlier hop. This top holds the two sampling engines of the published design:
//
//  * N_SMALL (16) small-graph sampling modules working in parallel. The host
//    splits the degree list and edge list into segments of consecutive nodes and
//    loads one segment into each module's block RAMs; each module samples its own
//    segment independently and emits its own stream, and the streams, taken in
//    module order, concatenate into the sample result of the whole graph. Sixteen
//    modules fill the evaluation FPGA in the published design.
//  * One large-graph sampling module fed with one 1024-bit word per node from
//    off-chip memory (the memory and its controller are outside this design).
//
// Each engine produces one sampled neighbour ID per clock. The engines share
// nothing but clock and reset; giving both to one top, with separate ports, is
// this design's choice (the published design selects the engine by graph size).
// Each small module gets its own LFSR seed, derived from SEED_BASE, so that the
// modules do not draw the same random sequence.
//
// Ports: per small module m, index [m] of each array: run control, list write
// ports, the output stream and the result RAM read port (see small_sampler).
// The large engine's ports carry the prefix lg_ (see large_sampler).
module concat_sampler_top
  import concat_pkg::*;
#(
  parameter int unsigned N_SMALL      = N_SMALL_MODULES,
  parameter int unsigned DEG_DEPTH    = 4096,
  parameter int unsigned EDGE_DEPTH   = 16384,
  parameter int unsigned RESULT_DEPTH = 4096,
  parameter int unsigned NBANKS       = 2,
  parameter rand_t       SEED_BASE    = 16'hACE1,
  localparam int unsigned DAW = $clog2(DEG_DEPTH),
  localparam int unsigned EAW = $clog2(EDGE_DEPTH),
  localparam int unsigned RAW = $clog2(RESULT_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,

  // ---------------- small-graph sampling modules ----------------
  input  logic [NBR_CNT_W-1:0]  num_neighbors,
  input  logic                  sm_start      [N_SMALL],
  input  logic [NODE_CNT_W-1:0] sm_num_nodes  [N_SMALL],
  input  node_id_t              sm_first_node [N_SMALL],
  input  logic [DAW-1:0]        sm_x_d0       [N_SMALL],
  input  logic [EAW-1:0]        sm_x_e0       [N_SMALL],
  output logic                  sm_busy       [N_SMALL],
  output logic                  sm_done       [N_SMALL],
  input  logic                  sm_seed_we    [N_SMALL],
  input  rand_t                 sm_seed       [N_SMALL],
  input  logic                  sm_deg_we     [N_SMALL],
  input  logic [DAW-1:0]        sm_deg_waddr  [N_SMALL],
  input  degree_t               sm_deg_wdata  [N_SMALL],
  input  logic                  sm_edge_we    [N_SMALL],
  input  logic [EAW-1:0]        sm_edge_waddr [N_SMALL],
  input  node_id_t              sm_edge_wdata [N_SMALL],
  output logic                  sm_out_valid  [N_SMALL],
  output node_id_t              sm_out_node_id[N_SMALL],
  output node_id_t              sm_out_nbr_id [N_SMALL],
  output logic                  sm_out_skip   [N_SMALL],
  input  logic [RAW-1:0]        sm_res_raddr  [N_SMALL],
  output node_id_t              sm_res_rdata  [N_SMALL],
  output logic [RAW:0]          sm_res_count  [N_SMALL],
  output logic                  sm_res_overflow[N_SMALL],

  // ---------------- large-graph sampling module ----------------
  input  logic                  lg_start,
  input  logic [NODE_CNT_W-1:0] lg_num_nodes,
  input  node_id_t              lg_first_node,
  output logic                  lg_busy,
  output logic                  lg_done,
  input  logic                  lg_seed_we,
  input  rand_t                 lg_seed,
  input  logic                  lg_in_valid,
  output logic                  lg_in_ready,
  input  logic [BUS_W-1:0]      lg_in_data,
  output logic                  lg_out_valid,
  output node_id_t              lg_out_node_id,
  output node_id_t              lg_out_nbr_id,
  output logic                  lg_out_skip,
  output logic                  lg_out_clipped
);

  // Distinct non-zero default seed per module: rotate and offset the base seed.
  function automatic rand_t module_seed(input int unsigned m);
    rand_t       s;
    int unsigned rot;
    rot = m % RAND_W;
    s = rand_t'((32'(SEED_BASE) << rot) | (32'(SEED_BASE) >> (RAND_W - rot)));
    s = s ^ rand_t'(32'h9E37 * m);
    return (s == '0) ? SEED_BASE : s;
  endfunction

  for (genvar m = 0; m < N_SMALL; m++) begin : g_small
    small_sampler #(
      .DEG_DEPTH   (DEG_DEPTH),
      .EDGE_DEPTH  (EDGE_DEPTH),
      .RESULT_DEPTH(RESULT_DEPTH),
      .SEED        (module_seed(m))
    ) u_small (
      .clk          (clk),
      .rst_n        (rst_n),
      .start        (sm_start[m]),
      .num_nodes    (sm_num_nodes[m]),
      .num_neighbors(num_neighbors),
      .first_node   (sm_first_node[m]),
      .x_d0         (sm_x_d0[m]),
      .x_e0         (sm_x_e0[m]),
      .busy         (sm_busy[m]),
      .done         (sm_done[m]),
      .seed_we      (sm_seed_we[m]),
      .seed         (sm_seed[m]),
      .deg_we       (sm_deg_we[m]),
      .deg_waddr    (sm_deg_waddr[m]),
      .deg_wdata    (sm_deg_wdata[m]),
      .edge_we      (sm_edge_we[m]),
      .edge_waddr   (sm_edge_waddr[m]),
      .edge_wdata   (sm_edge_wdata[m]),
      .out_valid    (sm_out_valid[m]),
      .out_node_id  (sm_out_node_id[m]),
      .out_nbr_id   (sm_out_nbr_id[m]),
      .out_skip     (sm_out_skip[m]),
      .res_raddr    (sm_res_raddr[m]),
      .res_rdata    (sm_res_rdata[m]),
      .res_count    (sm_res_count[m]),
      .res_overflow (sm_res_overflow[m])
    );
  end

  large_sampler #(
    .NBANKS(NBANKS),
    .SEED  (module_seed(N_SMALL))
  ) u_large (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (lg_start),
    .num_nodes    (lg_num_nodes),
    .num_neighbors(num_neighbors),
    .first_node   (lg_first_node),
    .busy         (lg_busy),
    .done         (lg_done),
    .seed_we      (lg_seed_we),
    .seed         (lg_seed),
    .in_valid     (lg_in_valid),
    .in_ready     (lg_in_ready),
    .in_data      (lg_in_data),
    .out_valid    (lg_out_valid),
    .out_node_id  (lg_out_node_id),
    .out_nbr_id   (lg_out_nbr_id),
    .out_skip     (lg_out_skip),
    .out_clipped  (lg_out_clipped)
  );

endmodule
