// neighbor_reg_bank: the 56 neighbour-ID register arrays of the large-graph sampler.
//
// For a graph streamed from off-chip memory, one 1024-bit bus word carries one
// node: the IDs of its first 56 neighbours (56 x 18 = 1008 bits) and its degree in
// the 16 bits left over. `load` copies the word into 56 registers of 18 bits and a
// degree register. The reduced random number, applied to `sel`, works as the select
// signal of a 56-to-1 multiplexer, so `nbr_id` is the sampled neighbour in the same
// clock (combinational read). The field sizes, the register arrays and the
// multiplexer follow the published design; the bit positions of the fields in the
// word are this design's choice (see concat_pkg).
module neighbor_reg_bank
  import concat_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [BUS_W-1:0] word,
  input  logic [5:0]       sel,
  output node_id_t         nbr_id,
  output degree_t          degree
);

  node_id_t nbr_q [LARGE_NBRS];
  degree_t  deg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < LARGE_NBRS; k++) nbr_q[k] <= '0;
      deg_q <= '0;
    end else if (load) begin
      for (int k = 0; k < LARGE_NBRS; k++) nbr_q[k] <= word[k*NODE_ID_W +: NODE_ID_W];
      deg_q <= word[WORD_DEG_LSB +: DEG_W];
    end
  end

  // 56-to-1 selector; select values 56..63 cannot occur (sel < min(degree, 56)).
  assign nbr_id = (sel < 6'(LARGE_NBRS)) ? nbr_q[sel] : '0;
  assign degree = deg_q;

endmodule
