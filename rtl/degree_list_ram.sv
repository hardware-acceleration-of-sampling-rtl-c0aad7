// degree_list_ram: on-chip degree list of one sampling module.
//
// Holds the degree of every node of the module's graph segment, one word per node,
// at address x_d = x_d0 + i for the i-th node (node IDs as offsets, as in the
// published design). It is a simple dual-port RAM written as an array so that an
// FPGA flow maps it to block RAM: a host write port for loading the list and a
// read port for the sampler with a registered output (data one clock after the
// address), the usual block-RAM timing. Depth and the read latency are this
// design's choices.
module degree_list_ram
  import concat_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // host write port
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  degree_t       wdata,
  // sampler read port
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output degree_t       rdata
);

  degree_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
