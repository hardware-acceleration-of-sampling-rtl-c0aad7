// modulo_unit: one multi-cycle remainder unit, r mod d.
//
// The published design reduces each 16-bit random number modulo the node degree and
// treats the modulo as a slow operation spread over several clocks; eight such units
// take turns so that the group still delivers one result per clock (see
// parallel_modulo). The figures give the timing: a unit fed in clock n delivers in
// clock n+8. How a unit computes is not given; here it is a restoring division that
// retires 2 dividend bits per clock, so a 16-bit dividend takes 8 steps. The first
// step is taken on the clock edge that captures the operands, the remaining 7 on the
// following edges, and `done` is high, with `rem` valid, for the one clock n+8.
//
// Interface: assert `start` for one clock with `dividend` and `divisor`. `busy` is
// high while the unit is stepping (clocks n+1..n+7); `start` must not be asserted
// then. A new `start` is accepted in the clock in which `done` is high. With a zero
// divisor the result equals the dividend (callers treat it as meaningless).
module modulo_unit
  import concat_pkg::*;
#(
  parameter int unsigned DIVIDEND_W = RAND_W,
  parameter int unsigned DIVISOR_W  = DEG_W,
  parameter int unsigned BITS_PER_STEP = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [DIVIDEND_W-1:0] dividend,
  input  logic [DIVISOR_W-1:0]  divisor,
  output logic                  busy,
  output logic                  done,
  output logic [DIVISOR_W-1:0]  rem
);

  localparam int unsigned STEPS = DIVIDEND_W / BITS_PER_STEP;
  localparam int unsigned CNT_W = $clog2(STEPS + 1);

  logic [DIVISOR_W:0]    rem_q;      // one spare bit for the shifted-in partial remainder
  logic [DIVIDEND_W-1:0] dvd_q;      // dividend bits not yet retired, MSB first
  logic [DIVISOR_W-1:0]  dvs_q;
  logic [CNT_W-1:0]      step_q;
  logic                  run_q;
  logic                  done_q;

  // One restoring step per dividend bit: shift the next bit in, subtract if it fits.
  function automatic logic [DIVISOR_W:0] retire(input logic [DIVISOR_W:0] r_in,
                                                input logic [BITS_PER_STEP-1:0] bits,
                                                input logic [DIVISOR_W-1:0] d);
    logic [DIVISOR_W+1:0] t;
    logic [DIVISOR_W:0]   r;
    r = r_in;
    for (int b = BITS_PER_STEP - 1; b >= 0; b--) begin
      t = {r, bits[b]};
      if (t >= {2'b00, d}) t = t - {2'b00, d};
      r = t[DIVISOR_W:0];
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q  <= '0;
      dvd_q  <= '0;
      dvs_q  <= '0;
      step_q <= '0;
      run_q  <= 1'b0;
      done_q <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (start) begin
        rem_q  <= retire('0, dividend[DIVIDEND_W-1 -: BITS_PER_STEP], divisor);
        dvd_q  <= dividend << BITS_PER_STEP;
        dvs_q  <= divisor;
        step_q <= CNT_W'(1);
        run_q  <= 1'b1;
      end else if (run_q) begin
        rem_q  <= retire(rem_q, dvd_q[DIVIDEND_W-1 -: BITS_PER_STEP], dvs_q);
        dvd_q  <= dvd_q << BITS_PER_STEP;
        step_q <= step_q + CNT_W'(1);
        if (step_q == CNT_W'(STEPS - 1)) begin
          run_q  <= 1'b0;
          done_q <= 1'b1;
        end
      end
    end
  end

  assign busy = run_q;
  assign done = done_q;
  assign rem  = rem_q[DIVISOR_W-1:0];

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !run_q)
    else $error("modulo_unit: start while busy");

  initial assert (DIVIDEND_W % BITS_PER_STEP == 0 && STEPS >= 2)
    else $error("modulo_unit: DIVIDEND_W must be a multiple of BITS_PER_STEP");

endmodule
