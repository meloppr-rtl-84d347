// accumulator: folds each propagation's result into the accumulated scores.
//
// Graph diffusion of depth l gives
//   S_l = (1-alpha) * sum_{k<l} alpha^k W^k S_0  +  alpha^l W^l S_0 ,
// so after propagation k the new residual r_k = W^k S_0 is added to pi^a
// with weight coef_k (supplied by the controller as an integer over 2^Q).
// The accumulator sweeps the PE's nodes one per cycle: it reads r_k from the
// residual table's next bank, computes pi^a += (coef * r_k) >> Q, zeroes the
// old cur entry, and after the last node swaps the residual banks so that r_k
// becomes the residual the next propagation reads. This is the flow of the
// paper's computation diagram (residual scores go on diffusing, accumulated
// scores go to the global table); the one-node-per-cycle sweep and the
// shift-based weighting are this design's way of doing it.
//
// Timing: start is a one-cycle pulse; busy rises the next cycle and stays up
// for n_nodes cycles plus one.
module accumulator
  import meloppr_pkg::*;
#(
  parameter int unsigned NODES = 2048,
  localparam int unsigned NA_W = $clog2(NODES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [COEF_W-1:0]  coef,
  input  logic [NA_W:0]      n_nodes,
  output logic               busy,
  // residual table
  output logic [NA_W-1:0]    x_addr,
  input  logic [SCORE_W-1:0] x_data,
  output logic               x_clr,
  output logic               swap,
  // accumulated-score table
  output logic [NA_W-1:0]    a_addr,
  input  logic [SCORE_W-1:0] a_rdata,
  output logic               a_wen,
  output logic [SCORE_W-1:0] a_wdata
);

  typedef enum logic [1:0] {S_IDLE, S_SWEEP, S_SWAP} state_e;
  state_e state;

  logic [NA_W:0]       idx;
  logic [COEF_W-1:0]   coef_q;

  assign x_addr  = idx[NA_W-1:0];
  assign a_addr  = idx[NA_W-1:0];
  assign a_wen   = (state == S_SWEEP) && (idx != n_nodes);
  assign x_clr   = a_wen;
  assign a_wdata = a_rdata + scale(x_data, coef_q);
  assign swap    = (state == S_SWAP);
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      idx    <= '0;
      coef_q <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          idx    <= '0;
          coef_q <= coef;
          state  <= S_SWEEP;
        end
        S_SWEEP: begin
          if (idx == n_nodes) state <= S_SWAP;
          else                idx   <= idx + 1'b1;
        end
        S_SWAP:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
