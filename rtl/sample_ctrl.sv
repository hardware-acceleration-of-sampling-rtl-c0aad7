// sample_ctrl: logic and timing control of a sampling module.
//
// Walks a sampling run: for node index i = 0 .. num_nodes-1 it issues
// num_neighbors sample requests k = 0 .. num_neighbors-1, one per clock, which is
// the published rate of one sampled neighbour per clock. The published design names
// this unit but does not describe it; this counter pair with a stall input is the
// simplest thing that sequences the datapaths of both sampling modules.
//
// Interface: a `start` pulse latches `num_nodes` and `num_neighbors` and begins the
// run (ignored while busy). While `busy`, `issue` is high each clock that is not
// stalled, with `node_idx`, `sample_idx`, `first` (k = 0) and `last`
// (k = num_neighbors-1). `stall` holds the current request for a clock and may
// depend on `first`. `done` pulses in the clock after the final request was issued
// (or after `start` when there is nothing to do).
module sample_ctrl
  import concat_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NODE_CNT_W-1:0] num_nodes,
  input  logic [NBR_CNT_W-1:0]  num_neighbors,
  input  logic                  stall,
  output logic                  busy,
  output logic                  issue,
  output logic [NODE_CNT_W-1:0] node_idx,
  output logic [NBR_CNT_W-1:0]  sample_idx,
  output logic                  first,
  output logic                  last,
  output logic                  done
);

  typedef enum logic [0:0] {S_IDLE, S_RUN} state_e;
  state_e state;

  logic [NODE_CNT_W-1:0] nodes_q;
  logic [NBR_CNT_W-1:0]  nbrs_q;
  logic                  final_req;

  assign busy       = (state == S_RUN);
  assign issue      = busy && !stall;
  assign first      = (sample_idx == '0);
  assign last       = (sample_idx == nbrs_q - NBR_CNT_W'(1));
  assign final_req  = last && (node_idx == nodes_q - NODE_CNT_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      nodes_q    <= '0;
      nbrs_q     <= '0;
      node_idx   <= '0;
      sample_idx <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          nodes_q    <= num_nodes;
          nbrs_q     <= num_neighbors;
          node_idx   <= '0;
          sample_idx <= '0;
          if (num_nodes == '0 || num_neighbors == '0) done  <= 1'b1;
          else                                        state <= S_RUN;
        end
        S_RUN: if (issue) begin
          if (final_req) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else if (last) begin
            sample_idx <= '0;
            node_idx   <= node_idx + NODE_CNT_W'(1);
          end else begin
            sample_idx <= sample_idx + NBR_CNT_W'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
