// concat_pkg: sizes and types shared by the CONCAT neighbour-sampling accelerator.
//
// The accelerator draws random neighbours of graph nodes from a degree list and an
// edge list (CSR-style adjacency without the row-pointer array: the start of a node's
// neighbours is rebuilt by summing the degrees of the nodes before it). Numbers that
// come from the published design: a 16-bit LFSR, 8 modulo units working in turn,
// 18-bit node IDs, 56 neighbour IDs plus a degree in one 1024-bit input word for
// streamed (large) graphs, 15 neighbours per node and 16 parallel sampling modules.
// Everything else here (memory depths, counter widths) is this design's own choice
// and is marked as such.
package concat_pkg;

  // Random number generator: 16 registers, r in [0, 65535] (published).
  localparam int unsigned RAND_W = 16;
  // Node ID width: 18 bits, enough for Reddit's 232,965 nodes (published).
  localparam int unsigned NODE_ID_W = 18;
  // Degree field: the streamed word leaves 16 bits for it (published); the same
  // width is used for on-chip degree lists (own choice).
  localparam int unsigned DEG_W = 16;
  // Parallel modulo: 8 units fed in turn, result 8 clocks after input (published).
  localparam int unsigned N_MOD_UNITS = 8;
  localparam int unsigned MOD_LATENCY = 8;
  // Streamed graphs: 1024-bit bus, 56 neighbour IDs per word (published).
  localparam int unsigned BUS_W = 1024;
  localparam int unsigned LARGE_NBRS = 56;
  // Neighbours sampled per node in the published experiments.
  localparam int unsigned DEFAULT_NUM_NEIGHBORS = 15;
  // Parallel small-graph sampling modules that fill the evaluation FPGA (published).
  localparam int unsigned N_SMALL_MODULES = 16;

  // Own choices: width of the run-time num_neighbors setting and of node counters.
  localparam int unsigned NBR_CNT_W  = 8;
  localparam int unsigned NODE_CNT_W = NODE_ID_W + 1;

  typedef logic [NODE_ID_W-1:0] node_id_t;
  typedef logic [DEG_W-1:0]     degree_t;
  typedef logic [RAND_W-1:0]    rand_t;

  // Layout of one streamed input word (own choice of bit positions; the field
  // sizes are published): neighbour k in bits [18k+17 : 18k], k = 0..55, the
  // degree in bits [1023:1008].
  localparam int unsigned WORD_DEG_LSB = LARGE_NBRS * NODE_ID_W;  // 1008

  // Galois LFSR feedback mask for x^16 + x^14 + x^13 + x^11 + 1 (own choice of a
  // maximal-length polynomial; the tap positions are not given numerically).
  localparam logic [RAND_W-1:0] LFSR_MASK = 16'hB400;

endpackage
