// diffusion_ctrl: sequences one graph diffusion of depth l over all PEs and
// drains its result.
//
// With S_0 loaded into the residual tables, a diffusion of depth l is
//   accumulate(coef_0); then for k = 1..l: propagate; accumulate(coef_k)
// where propagate runs all diffusers until every one is idle (the barrier
// between iterations) and accumulate runs all accumulators. The weights
// follow Eq. (1) of the method, S_l = (1-a) sum_{k<l} a^k W^k S_0 + a^l W^l S_0:
//   coef_k = ((2^Q - alpha_p) * a_k) >> Q  for k < l,  a_k = alpha^k in Q bits
//   coef_l = a_l if this is the final stage, else 0.
// Dropping the a^l W^l S_0 term in a first stage is the same as subtracting
// alpha^l1 * S^r_l1 in the multi-stage decomposition (Eq. (7)); the removed
// mass comes back through the next-stage diffusions, whose seeds the host
// sets to alpha^l1 * S^r_l1[v].
//
// Drain: every PE entry is read in turn; a non-zero pi^a is sent to the
// global score table, and if emit_res is set a non-zero residual is sent to
// the host as (global id, (a_l * r) >> Q), the candidate next-stage node
// with the seed value it would need.
//
// Timing: run is a one-cycle pulse; busy stays up until done pulses.
module diffusion_ctrl
  import meloppr_pkg::*;
#(
  parameter int unsigned P     = 16,
  parameter int unsigned NODES = 2048,   // per PE
  localparam int unsigned NA_W = $clog2(NODES),
  localparam int unsigned PB_W = (P > 1) ? $clog2(P) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  logic [ALPHA_W-1:0] alpha_p,
  input  logic [DEPTH_W-1:0] depth,
  input  logic               final_stage,
  input  logic               emit_res,
  input  logic [NA_W:0]      n_nodes [P],
  output logic               busy,
  output logic               done,
  // PE control
  output logic               diff_start,
  input  logic               diff_idle,     // from the scheduler
  output logic               acc_start,
  output logic [COEF_W-1:0]  acc_coef,
  input  logic [P-1:0]       acc_busy,
  // drain read
  output logic [NA_W-1:0]    d_addr,
  input  logic [GID_W-1:0]   d_gid [P],
  input  logic [SCORE_W-1:0] d_acc [P],
  input  logic [SCORE_W-1:0] d_res [P],
  // to the global score table
  output logic               gst_valid,
  input  logic               gst_ready,
  output logic [GID_W-1:0]   gst_gid,
  output logic [SCORE_W-1:0] gst_score,
  // next-stage candidates to the host
  output logic               res_valid,
  input  logic               res_ready,
  output logic [GID_W-1:0]   res_gid,
  output logic [SCORE_W-1:0] res_score,
  // statistics
  output logic [31:0]        n_iter,
  output logic [31:0]        n_res_sent
);

  typedef enum logic [3:0] {
    S_IDLE, S_ACC, S_ACC_WAIT, S_DIFF, S_DIFF_WAIT,
    S_DRAIN, S_D_GST, S_D_RES, S_DONE
  } state_e;
  state_e state;

  logic [DEPTH_W-1:0]  k;
  logic [COEF_W-1:0]   a_k;            // alpha^k, Q fraction bits
  logic [ALPHA_W-1:0]  alpha_q;
  logic [DEPTH_W-1:0]  depth_q;
  logic                final_q, emit_q;
  logic [PB_W-1:0]     pe_i;
  logic [NA_W:0]       addr;

  function automatic logic [COEF_W-1:0] mulq(input logic [COEF_W-1:0] x,
                                             input logic [ALPHA_W:0] y);
    logic [COEF_W+ALPHA_W:0] p;
    p = (COEF_W+ALPHA_W+1)'(x) * (COEF_W+ALPHA_W+1)'(y);
    return COEF_W'(p >> Q_SHIFT);
  endfunction

  logic [ALPHA_W:0] one_minus_a;
  assign one_minus_a = (ALPHA_W+1)'(1 << Q_SHIFT) - (ALPHA_W+1)'(alpha_q);

  always_comb begin
    if (k != depth_q)  acc_coef = mulq(a_k, one_minus_a);
    else if (final_q)  acc_coef = a_k;
    else               acc_coef = '0;
  end

  assign busy       = (state != S_IDLE);
  assign done       = (state == S_DONE);
  assign acc_start  = (state == S_ACC);
  assign diff_start = (state == S_DIFF);
  assign d_addr     = addr[NA_W-1:0];
  assign gst_valid  = (state == S_D_GST);
  assign gst_gid    = d_gid[pe_i];
  assign gst_score  = d_acc[pe_i];
  assign res_valid  = (state == S_D_RES);
  assign res_gid    = d_gid[pe_i];
  assign res_score  = scale(d_res[pe_i], a_k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      k          <= '0;
      a_k        <= '0;
      alpha_q    <= '0;
      depth_q    <= '0;
      final_q    <= 1'b0;
      emit_q     <= 1'b0;
      pe_i       <= '0;
      addr       <= '0;
      n_iter     <= '0;
      n_res_sent <= '0;
    end else begin
      case (state)
        S_IDLE: if (run) begin
          k       <= '0;
          a_k     <= COEF_W'(1 << Q_SHIFT);
          alpha_q <= alpha_p;
          depth_q <= depth;
          final_q <= final_stage;
          emit_q  <= emit_res;
          state   <= S_ACC;
        end
        S_ACC:      state <= S_ACC_WAIT;
        S_ACC_WAIT: if (acc_busy == '0) begin
          if (k == depth_q) begin
            pe_i  <= '0;
            addr  <= '0;
            state <= S_DRAIN;
          end else begin
            k     <= k + 1'b1;
            a_k   <= mulq(a_k, {1'b0, alpha_q});
            state <= S_DIFF;
          end
        end
        S_DIFF:      state <= S_DIFF_WAIT;
        S_DIFF_WAIT: if (diff_idle) begin
          n_iter <= n_iter + 1;
          state  <= S_ACC;
        end
        S_DRAIN: begin
          if (addr == n_nodes[pe_i]) begin
            addr <= '0;
            if (int'(pe_i) == P - 1) state <= S_DONE;
            else                     pe_i  <= pe_i + 1'b1;
          end else if (d_acc[pe_i] != '0) begin
            state <= S_D_GST;
          end else if (emit_q && d_res[pe_i] != '0) begin
            state <= S_D_RES;
          end else begin
            addr <= addr + 1'b1;
          end
        end
        S_D_GST: if (gst_ready) begin
          if (emit_q && d_res[pe_i] != '0) state <= S_D_RES;
          else begin
            addr  <= addr + 1'b1;
            state <= S_DRAIN;
          end
        end
        S_D_RES: if (res_ready) begin
          n_res_sent <= n_res_sent + 1;
          addr       <= addr + 1'b1;
          state      <= S_DRAIN;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
