// parallel_modulo: eight multi-cycle modulo units that work in turn so that one
// remainder leaves the group every clock.
//
// Each modulo_unit needs 8 clocks per remainder. A round-robin "control signal"
// (here the pointer `wr_ptr`) hands the operation of clock n to unit 0, of clock
// n+1 to unit 1, ... of clock n+7 to unit 7; the operand registers of each unit are
// the "input data registers" of the published block diagram. A second pointer, the
// "select signal" `rd_ptr`, steers the output multiplexer to the unit whose result
// is due, so the results of clocks n..n+7 leave in clocks n+8..n+15, in order.
// This structure and its timing follow the published design; the side-band tag that
// travels with each operation is this design's addition, used by the samplers to
// carry addresses and flags alongside the remainder.
//
// Each unit retires RAND_W / N_UNITS dividend bits per clock, so its latency equals
// the number of units and a unit is free again exactly when its turn comes round.
//
// Interface: `in_valid` with `dividend`, `divisor`, `in_tag` may be asserted every
// clock. Exactly MOD_LATENCY (8) clocks later `out_valid` is high with
// `out_rem` = dividend mod divisor and `out_tag` = in_tag. Gaps in the input give
// the same gaps at the output.
module parallel_modulo
  import concat_pkg::*;
#(
  parameter int unsigned N_UNITS = N_MOD_UNITS,
  parameter int unsigned TAG_W   = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  rand_t            dividend,
  input  degree_t          divisor,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output degree_t          out_rem,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned PTR_W = (N_UNITS > 1) ? $clog2(N_UNITS) : 1;

  logic [PTR_W-1:0] wr_ptr, rd_ptr;
  logic [N_UNITS-1:0] unit_start, unit_busy, unit_done;
  degree_t          unit_rem [N_UNITS];
  logic [TAG_W-1:0] unit_tag [N_UNITS];

  function automatic logic [PTR_W-1:0] next_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(N_UNITS - 1)) ? '0 : p + PTR_W'(1);
  endfunction

  // Control signal: decode the write pointer into one start strobe.
  always_comb begin
    unit_start = '0;
    unit_start[wr_ptr] = in_valid;
  end

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    modulo_unit #(
      .DIVIDEND_W   (RAND_W),
      .DIVISOR_W    (DEG_W),
      .BITS_PER_STEP(RAND_W / N_UNITS)
    ) u_mod (
      .clk     (clk),
      .rst_n   (rst_n),
      .start   (unit_start[u]),
      .dividend(dividend),
      .divisor (divisor),
      .busy    (unit_busy[u]),
      .done    (unit_done[u]),
      .rem     (unit_rem[u])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)             unit_tag[u] <= '0;
      else if (unit_start[u]) unit_tag[u] <= in_tag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (in_valid)  wr_ptr <= next_ptr(wr_ptr);
      if (out_valid) rd_ptr <= next_ptr(rd_ptr);
    end
  end

  // Select signal: the output multiplexer follows the read pointer.
  assign out_valid = unit_done[rd_ptr];
  assign out_rem   = unit_rem[rd_ptr];
  assign out_tag   = unit_tag[rd_ptr];

  // Results must come back in issue order, one unit at a time.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(unit_done))
    else $error("parallel_modulo: two units finished in the same clock");
  assert property (@(posedge clk) disable iff (!rst_n) (unit_done != '0) |-> out_valid)
    else $error("parallel_modulo: result from a unit the select signal does not point at");

  assert property (@(posedge clk) disable iff (!rst_n) (unit_start & unit_busy) == '0)
    else $error("parallel_modulo: operation handed to a busy unit");

  initial assert (RAND_W % N_UNITS == 0)
    else $error("parallel_modulo: N_UNITS must divide RAND_W");

endmodule
