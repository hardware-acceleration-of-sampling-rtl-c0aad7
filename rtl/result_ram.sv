// result_ram: store for the sampled node IDs of one sampling module.
//
// The published design sends sampled IDs either to an output port or to a RAM,
// at the user's choice; this module is that RAM, kept next to the port. Each
// sample written is appended at the next address, so after a run the host finds
// the samples in issue order (node by node, num_neighbors per node) at addresses
// 0 .. count-1. The write pointer restarts at `clear`. Samples beyond DEPTH are
// dropped and raise the sticky `overflow` flag until the next `clear`. Depth and the
// overflow rule are this design's choices.
//
// Interface: write `we`/`wdata` (one per clock at most); read port `raddr` gives
// `rdata` one clock later.
module result_ram
  import concat_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          we,
  input  node_id_t      wdata,
  input  logic [AW-1:0] raddr,
  output node_id_t      rdata,
  output logic [AW:0]   count,
  output logic          overflow
);

  node_id_t mem [DEPTH];
  logic     full;

  assign full = (count == (AW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (we && !full && !clear) mem[count[AW-1:0]] <= wdata;
    rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (we) begin
      if (full) overflow <= 1'b1;
      else      count    <= count + (AW+1)'(1);
    end
  end

endmodule
