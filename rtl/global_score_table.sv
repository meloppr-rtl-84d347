// global_score_table: the accelerator-side copy of the final score vector,
// limited to the c*k best nodes.
//
// MeLoPPR sums the score vectors of many sub-graph diffusions into one global
// vector, but only its top k entries are wanted. Keeping all of it would cost
// memory of the size of the whole L-hop neighbourhood, and sending every
// sub-graph's result back to the host would cost transfer time, so the paper
// keeps a fixed table of c*k entries (c = 10, k = 200) on chip and sends back
// only the top k at the end.
//
// Aggregation (this design's choice of how): an incoming (global id, score)
// is compared with the used entries one per cycle. On an id match the score
// is added. Otherwise the node is appended while there is room; when the
// table is full it replaces the smallest entry if its own score is larger
// (an eviction) and is dropped if not. Top-k readout makes k passes over the
// used entries, each picking the largest entry not yet sent (the first one
// on ties), and streams (id, score) with valid/ready.
//
// Timing: an input costs (used entries + 2) cycles; a top-k readout costs
// about k * (used + 2) cycles. clear empties the table in one cycle.
// Counters report matches, inserts, evictions and drops since the last clear.
module global_score_table
  import meloppr_pkg::*;
#(
  parameter int unsigned SIZE = DEF_C * DEF_K,  // c * k entries
  parameter int unsigned K    = DEF_K,
  localparam int unsigned IX_W = $clog2(SIZE + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  // aggregation input
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [GID_W-1:0]   in_gid,
  input  logic [SCORE_W-1:0] in_score,
  // top-k readout
  input  logic               topk_start,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [GID_W-1:0]   out_gid,
  output logic [SCORE_W-1:0] out_score,
  output logic               topk_done,   // one-cycle pulse after the last entry
  output logic               busy,
  output logic [IX_W-1:0]    used,
  output logic [31:0]        n_match,
  output logic [31:0]        n_insert,
  output logic [31:0]        n_evict,
  output logic [31:0]        n_drop
);

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_PLACE, S_TK_SCAN, S_TK_OUT, S_TK_DONE} state_e;
  state_e state;

  logic [GID_W-1:0]   id_mem    [SIZE];
  logic [SCORE_W-1:0] score_mem [SIZE];
  logic [SIZE-1:0]    sent;

  logic [IX_W-1:0]    i;
  logic [GID_W-1:0]   c_gid;
  logic [SCORE_W-1:0] c_score;
  logic [IX_W-1:0]    min_i, best_i;
  logic [SCORE_W-1:0] min_v, best_v;
  logic               best_ok;
  logic [IX_W-1:0]    pass;

  assign in_ready  = (state == S_IDLE) && !clear && !topk_start;
  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_TK_OUT);
  assign out_gid   = id_mem[best_i];
  assign out_score = score_mem[best_i];
  assign topk_done = (state == S_TK_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      used     <= '0;
      i        <= '0;
      c_gid    <= '0;
      c_score  <= '0;
      min_i    <= '0;
      min_v    <= '0;
      best_i   <= '0;
      best_v   <= '0;
      best_ok  <= 1'b0;
      pass     <= '0;
      sent     <= '0;
      n_match  <= '0;
      n_insert <= '0;
      n_evict  <= '0;
      n_drop   <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (clear) begin
            used     <= '0;
            n_match  <= '0;
            n_insert <= '0;
            n_evict  <= '0;
            n_drop   <= '0;
          end else if (topk_start) begin
            sent    <= '0;
            pass    <= '0;
            i       <= '0;
            best_ok <= 1'b0;
            best_v  <= '0;
            state   <= S_TK_SCAN;
          end else if (in_valid) begin
            c_gid   <= in_gid;
            c_score <= in_score;
            i       <= '0;
            min_i   <= '0;
            min_v   <= '1;
            state   <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (i == used) begin
            state <= S_PLACE;
          end else if (id_mem[i] == c_gid) begin
            score_mem[i] <= score_mem[i] + c_score;
            n_match      <= n_match + 1;
            state        <= S_IDLE;
          end else begin
            if (score_mem[i] < min_v) begin
              min_v <= score_mem[i];
              min_i <= i;
            end
            i <= i + 1'b1;
          end
        end
        S_PLACE: begin
          if (used != IX_W'(SIZE)) begin
            id_mem[used]    <= c_gid;
            score_mem[used] <= c_score;
            used            <= used + 1'b1;
            n_insert        <= n_insert + 1;
          end else if (c_score > min_v) begin
            id_mem[min_i]    <= c_gid;
            score_mem[min_i] <= c_score;
            n_evict          <= n_evict + 1;
          end else begin
            n_drop <= n_drop + 1;
          end
          state <= S_IDLE;
        end
        S_TK_SCAN: begin
          if (pass == IX_W'(K) || pass == used) begin
            state <= S_TK_DONE;
          end else if (i == used) begin
            state <= S_TK_OUT;
          end else begin
            if (!sent[i] && (!best_ok || score_mem[i] > best_v)) begin
              best_ok <= 1'b1;
              best_v  <= score_mem[i];
              best_i  <= i;
            end
            i <= i + 1'b1;
          end
        end
        S_TK_OUT: if (out_ready) begin
          sent[best_i] <= 1'b1;
          pass         <= pass + 1'b1;
          i            <= '0;
          best_ok      <= 1'b0;
          state        <= S_TK_SCAN;
        end
        S_TK_DONE: state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

endmodule
