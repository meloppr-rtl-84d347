// stream_if: the link between the host processor and the accelerator.
//
// The host extracts each sub-graph by BFS and streams it in; the accelerator
// streams back the candidate next-stage nodes of a first-stage diffusion and,
// at the end of a query, the top-k nodes. The paper names this "streaming
// interface" and the kinds of data it carries; the command set and word
// format below are this design's own (see meloppr_pkg):
//
//   CFG    starts a new sub-graph: alpha_p, depth l, final-stage and
//          emit-residual flags; resets the node and neighbour fill counters
//   NODE   the next node (local ids are given in arrival order): global id and
//          degree d, followed by d NBR words with the neighbours' local ids.
//          Node v goes to PE v mod P, address v div P; its neighbours are
//          appended to that PE's neighbour list and the record gets the first
//          and last address of them.
//   SEED   initial score of one node (Max for the query seed, or
//          alpha^l1 * residual for a next-stage node)
//   RUN    diffuse and aggregate; CLEAR empties the global table;
//          TOPK streams the top-k. Each of these three ends with a DONE word.
//
// Input and output use valid/ready; a word transfers when both are high. The
// interface accepts no command while a RUN, CLEAR or TOPK is still running,
// nor while the global table is still folding in the last score of a RUN;
// the DONE word itself waits for that, so the status outputs are final when
// the host sees it.
// Load words take one cycle each.
module stream_if
  import meloppr_pkg::*;
#(
  parameter int unsigned P     = 16,
  parameter int unsigned NODES = 2048,  // per PE
  parameter int unsigned EDGES = 8192,  // per PE
  parameter int unsigned LID_W = 15,
  localparam int unsigned NA_W = $clog2(NODES),
  localparam int unsigned EA_W = $clog2(EDGES),
  localparam int unsigned PB_W = (P > 1) ? $clog2(P) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // host in
  input  logic               in_valid,
  output logic               in_ready,
  input  host_word_t         in_word,
  // host out
  output logic               out_valid,
  input  logic               out_ready,
  output out_word_t          out_word,
  // configuration
  output logic [ALPHA_W-1:0] alpha_p,
  output logic [DEPTH_W-1:0] depth,
  output logic               final_stage,
  output logic               emit_res,
  output logic [NA_W:0]      n_nodes [P],
  // loader writes, broadcast with a per-PE enable
  output logic [P-1:0]       nw_en,
  output logic [NA_W-1:0]    nw_addr,
  output logic [EA_W-1:0]    nw_first,
  output logic [EA_W-1:0]    nw_last,
  output logic [GID_W-1:0]   nw_gid,
  output logic [P-1:0]       ew_en,
  output logic [EA_W-1:0]    ew_addr,
  output logic [LID_W-1:0]   ew_data,
  output logic [P-1:0]       seed_en,
  output logic [NA_W-1:0]    seed_addr,
  output logic [SCORE_W-1:0] seed_val,
  // commands
  output logic               run,
  input  logic               run_done,
  output logic               gst_clear,
  output logic               gst_topk,
  input  logic               gst_topk_done,
  input  logic               gst_busy,     // still folding in the last score
  // data returned to the host
  input  logic               res_valid,
  output logic               res_ready,
  input  logic [GID_W-1:0]   res_gid,
  input  logic [SCORE_W-1:0] res_score,
  input  logic               tk_valid,
  output logic               tk_ready,
  input  logic [GID_W-1:0]   tk_gid,
  input  logic [SCORE_W-1:0] tk_score,
  output logic [31:0]        n_loaded      // nodes of the current sub-graph
);

  typedef enum logic [1:0] {S_CMD, S_RUN, S_TOPK, S_DONE} state_e;
  state_e state;

  logic [EA_W:0]   fill [P];     // next free neighbour entry per PE
  logic [PB_W-1:0] cur_pe;       // PE of the node whose neighbours arrive
  op_e             done_op;

  logic [LID_W-1:0] lid;
  logic [PB_W-1:0]  lid_pe;
  logic             take;

  assign take   = in_valid && in_ready;
  assign lid    = LID_W'(n_loaded);
  assign lid_pe = PB_W'(lid % LID_W'(P));

  // a command waits until the global table has absorbed the previous RUN
  assign in_ready = (state == S_CMD) && !gst_busy;

  // loader writes (combinational from the accepted word)
  always_comb begin
    nw_en     = '0;
    ew_en     = '0;
    seed_en   = '0;
    nw_addr   = NA_W'(lid / LID_W'(P));
    nw_gid    = in_word.a;
    nw_first  = EA_W'(fill[lid_pe]);
    nw_last   = EA_W'(fill[lid_pe] + (EA_W+1)'(in_word.b) - 1'b1);
    ew_addr   = EA_W'(fill[cur_pe]);
    ew_data   = LID_W'(in_word.a);
    seed_addr = NA_W'(LID_W'(in_word.a) / LID_W'(P));
    seed_val  = in_word.b;
    if (take) begin
      case (in_word.op)
        OP_NODE: nw_en[lid_pe] = 1'b1;
        OP_NBR:  ew_en[cur_pe] = 1'b1;
        OP_SEED: seed_en[PB_W'(LID_W'(in_word.a) % LID_W'(P))] = 1'b1;
        default: ;
      endcase
    end
  end

  assign run       = take && in_word.op == OP_RUN;
  assign gst_clear = take && in_word.op == OP_CLEAR;
  assign gst_topk  = take && in_word.op == OP_TOPK;

  // output: next-stage candidates during RUN, top-k during TOPK, then DONE
  assign res_ready = (state == S_RUN)  && out_ready;
  assign tk_ready  = (state == S_TOPK) && out_ready;
  always_comb begin
    out_valid = 1'b0;
    out_word  = '{tag: TAG_DONE, a: 32'(done_op), b: 32'd0};
    case (state)
      S_RUN:  if (res_valid) begin
        out_valid = 1'b1;
        out_word  = '{tag: TAG_RES, a: res_gid, b: res_score};
      end
      S_TOPK: if (tk_valid) begin
        out_valid = 1'b1;
        out_word  = '{tag: TAG_TOPK, a: tk_gid, b: tk_score};
      end
      S_DONE: out_valid = !gst_busy;   // only once every score is in the table
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_CMD;
      alpha_p     <= '0;
      depth       <= '0;
      final_stage <= 1'b0;
      emit_res    <= 1'b0;
      n_loaded    <= '0;
      cur_pe      <= '0;
      done_op     <= OP_RUN;
      for (int p = 0; p < P; p++) begin
        fill[p]    <= '0;
        n_nodes[p] <= '0;
      end
    end else begin
      case (state)
        S_CMD: if (take) begin
          case (in_word.op)
            OP_CFG: begin
              alpha_p     <= in_word.a[15:0];
              depth       <= in_word.a[19:16];
              final_stage <= in_word.a[20];
              emit_res    <= in_word.a[21];
              n_loaded    <= '0;
              for (int p = 0; p < P; p++) begin
                fill[p]    <= '0;
                n_nodes[p] <= '0;
              end
            end
            OP_NODE: begin
              n_loaded        <= n_loaded + 1;
              n_nodes[lid_pe] <= n_nodes[lid_pe] + 1'b1;
              cur_pe          <= lid_pe;
            end
            OP_NBR:   fill[cur_pe] <= fill[cur_pe] + 1'b1;
            OP_RUN:   begin done_op <= OP_RUN;   state <= S_RUN;  end
            OP_CLEAR: begin done_op <= OP_CLEAR; state <= S_DONE; end
            OP_TOPK:  begin done_op <= OP_TOPK;  state <= S_TOPK; end
            default: ;
          endcase
        end
        S_RUN:  if (run_done)      state <= S_DONE;
        S_TOPK: if (gst_topk_done) state <= S_DONE;
        S_DONE: if (out_ready && !gst_busy) state <= S_CMD;
        default: state <= S_CMD;
      endcase
    end
  end

endmodule
