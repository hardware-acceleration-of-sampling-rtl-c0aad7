// base_addr_unit: base address of the current node's neighbours in the edge list.
//
// The edge list stores no per-node pointer. Because nodes are sampled in ID order,
// the base address of node i is rebuilt as a running sum,
//     x_e(i) = x_e0 + d_0 + d_1 + ... + d_(i-1),
// so node 0 starts at x_e0 and each finished node moves the base on by its degree.
// (The published text writes the sum up to n = i; its sampling diagram puts node
// 0's neighbours at x_e0 itself, which is what is built here.)
//
// Interface: `init` loads x_e0 at the start of a run. `advance` with `degree`
// adds that node's degree after its last sample has been issued; `base` is the
// registered base of the node being sampled. Addresses wrap at 2^AW.
module base_addr_unit
  import concat_pkg::*;
#(
  parameter int unsigned AW = 14
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init,
  input  logic [AW-1:0] x_e0,
  input  logic          advance,
  input  degree_t       degree,
  output logic [AW-1:0] base
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       base <= '0;
    else if (init)    base <= x_e0;
    else if (advance) base <= base + AW'(degree);
  end

endmodule
