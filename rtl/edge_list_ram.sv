// edge_list_ram: on-chip edge list of one sampling module.
//
// Holds the second column of the graph's edge index (the end-node IDs), sorted by
// start node, so that the neighbours of the i-th node of the segment occupy the
// addresses x_ei .. x_ei + d_i - 1, where x_ei is the sum of the preceding degrees
// plus the list's base address x_e0. Only this column is stored; the start node is
// implied by the position. An undirected edge appears once in each direction.
// Written as a simple dual-port array (host write port, sampler read port with data
// one clock after the address) so that it maps to block RAM. Depth and timing are
// this design's choices; stored IDs are global 18-bit node IDs.
module edge_list_ram
  import concat_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // host write port
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  node_id_t      wdata,
  // sampler read port
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output node_id_t      rdata
);

  node_id_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
