// meloppr_top: the programmable-logic part of MeLoPPR, the accelerator that
// runs the graph diffusions of the memory-efficient multi-stage Personalized
// PageRank while a host processor does BFS and overall control.
//
// Structure (after the paper's block diagram): P processing elements, each
// with a sub-graph table, accumulated- and residual-score tables, a diffuser
// and an accumulator; a scheduler that carries every diffuser's score writes
// to the PE owning the destination node; a controller that sequences the
// iterations of one diffusion and drains the results; the global score table
// of the top c*k nodes; and the streaming interface to the host.
//
// Operation for one query (host side in brackets): CLEAR; [BFS of depth l1
// from the seed] CFG(stage 1, emit) + NODE/NBR words + SEED(Max) + RUN, which
// returns the nodes with non-zero residual weighted by alpha^l1; [choose the
// next-stage nodes with the largest values] for each: CFG(final) + sub-graph
// + SEED(value) + RUN; finally TOPK returns the k best nodes.
//
// Interface: valid/ready host streams of host_word_t and out_word_t, plus
// status counters: write-conflict stalls, propagations, candidates sent, the
// global table's match/insert/evict/drop counts and fill, and the diffusers'
// read/write/skip counts of the latest propagation summed over the PEs (the
// read and write counters of the paper's block diagram).
//
// All logic runs on clk; rst_n is an asynchronous, active-low reset. The
// default sizes are the paper's P = 16, c*k = 2000 and 32-bit scores;
// table depths per PE are this design's choice.
module meloppr_top
  import meloppr_pkg::*;
#(
  parameter int unsigned P        = DEF_P,
  parameter int unsigned NODES_PE = DEF_NODES_PE,
  parameter int unsigned EDGES_PE = DEF_EDGES_PE,
  parameter int unsigned GST_SIZE = DEF_C * DEF_K,
  parameter int unsigned TOP_K    = DEF_K,
  localparam int unsigned LID_W   = $clog2(P * NODES_PE),
  localparam int unsigned NA_W    = $clog2(NODES_PE),
  localparam int unsigned EA_W    = $clog2(EDGES_PE)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  host_word_t  in_word,
  output logic        out_valid,
  input  logic        out_ready,
  output out_word_t   out_word,
  output logic        busy,
  output logic [31:0] stall_ctr,    // lost write arbitrations
  output logic [31:0] n_iter,       // propagations run
  output logic [31:0] n_res_sent,   // next-stage candidates sent
  output logic [31:0] gst_match,
  output logic [31:0] gst_insert,
  output logic [31:0] gst_evict,
  output logic [31:0] gst_drop,
  output logic [31:0] n_loaded,     // nodes of the current sub-graph
  output logic [31:0] n_reads,      // node records read by the diffusers,
  output logic [31:0] n_writes,     // score writes granted to them and
  output logic [31:0] n_skips,      // nodes skipped, in the latest propagation
  output logic [$clog2(GST_SIZE+1)-1:0] gst_used  // global-table entries in use
);

  // configuration
  logic [ALPHA_W-1:0] alpha_p;
  logic [DEPTH_W-1:0] depth;
  logic               final_stage, emit_res;
  logic [NA_W:0]      n_nodes [P];

  // loader
  logic [P-1:0]       nw_en, ew_en, seed_en;
  logic [NA_W-1:0]    nw_addr, seed_addr;
  logic [EA_W-1:0]    nw_first, nw_last, ew_addr;
  logic [GID_W-1:0]   nw_gid;
  logic [LID_W-1:0]   ew_data;
  logic [SCORE_W-1:0] seed_val;

  // control
  logic               run, run_done, ctrl_busy;
  logic               diff_start, acc_start, diff_idle;
  logic [COEF_W-1:0]  acc_coef;
  logic [P-1:0]       diff_busy, acc_busy;

  // scheduler
  logic [P-1:0]       req_valid, req_grant, upd_en;
  logic [LID_W-1:0]   req_dest  [P];
  logic [SCORE_W-1:0] req_value [P];
  logic [NA_W-1:0]    upd_addr  [P];
  logic [SCORE_W-1:0] upd_val   [P];

  // drain
  logic [NA_W-1:0]    d_addr;
  logic [GID_W-1:0]   d_gid [P];
  logic [SCORE_W-1:0] d_acc [P];
  logic [SCORE_W-1:0] d_res [P];
  logic               gst_valid, gst_ready;
  logic [GID_W-1:0]   gst_gid;
  logic [SCORE_W-1:0] gst_score;
  logic               res_valid, res_ready;
  logic [GID_W-1:0]   res_gid;
  logic [SCORE_W-1:0] res_score;

  // global table
  logic               gst_clear, gst_topk, gst_topk_done, gst_busy;
  logic               tk_valid, tk_ready;
  logic [GID_W-1:0]   tk_gid;
  logic [SCORE_W-1:0] tk_score;

  // per-PE diffuser counters
  logic [31:0]        read_ctr [P];
  logic [31:0]        write_ctr [P];
  logic [31:0]        skip_ctr [P];

  stream_if #(.P(P), .NODES(NODES_PE), .EDGES(EDGES_PE), .LID_W(LID_W)) u_stream (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_word, .out_valid, .out_ready, .out_word,
    .alpha_p, .depth, .final_stage, .emit_res, .n_nodes,
    .nw_en, .nw_addr, .nw_first, .nw_last, .nw_gid,
    .ew_en, .ew_addr, .ew_data, .seed_en, .seed_addr, .seed_val,
    .run, .run_done, .gst_clear, .gst_topk, .gst_topk_done, .gst_busy,
    .res_valid, .res_ready, .res_gid, .res_score,
    .tk_valid, .tk_ready, .tk_gid, .tk_score, .n_loaded
  );

  for (genvar p = 0; p < P; p++) begin : g_pe
    pe #(.NODES(NODES_PE), .EDGES(EDGES_PE), .LID_W(LID_W)) u_pe (
      .clk, .rst_n,
      .nw_en(nw_en[p]), .nw_addr, .nw_first, .nw_last, .nw_gid,
      .ew_en(ew_en[p]), .ew_addr, .ew_data,
      .seed_en(seed_en[p]), .seed_addr, .seed_val,
      .n_nodes(n_nodes[p]),
      .diff_start, .diff_busy(diff_busy[p]),
      .acc_start, .acc_coef, .acc_busy(acc_busy[p]),
      .req_valid(req_valid[p]), .req_dest(req_dest[p]), .req_value(req_value[p]),
      .req_grant(req_grant[p]),
      .upd_en(upd_en[p]), .upd_addr(upd_addr[p]), .upd_val(upd_val[p]),
      .d_addr, .d_gid(d_gid[p]), .d_acc(d_acc[p]), .d_res(d_res[p]),
      .read_ctr(read_ctr[p]), .write_ctr(write_ctr[p]), .skip_ctr(skip_ctr[p])
    );
  end

  scheduler #(.P(P), .LID_W(LID_W)) u_sched (
    .clk, .rst_n,
    .req_valid, .req_dest, .req_value, .req_grant,
    .diff_busy, .all_idle(diff_idle),
    .upd_en, .upd_addr, .upd_val, .stall_ctr
  );

  diffusion_ctrl #(.P(P), .NODES(NODES_PE)) u_ctrl (
    .clk, .rst_n, .run, .alpha_p, .depth, .final_stage, .emit_res, .n_nodes,
    .busy(ctrl_busy), .done(run_done),
    .diff_start, .diff_idle, .acc_start, .acc_coef, .acc_busy,
    .d_addr, .d_gid, .d_acc, .d_res,
    .gst_valid, .gst_ready, .gst_gid, .gst_score,
    .res_valid, .res_ready, .res_gid, .res_score,
    .n_iter, .n_res_sent
  );

  global_score_table #(.SIZE(GST_SIZE), .K(TOP_K)) u_gst (
    .clk, .rst_n, .clear(gst_clear),
    .in_valid(gst_valid), .in_ready(gst_ready), .in_gid(gst_gid), .in_score(gst_score),
    .topk_start(gst_topk), .out_valid(tk_valid), .out_ready(tk_ready),
    .out_gid(tk_gid), .out_score(tk_score), .topk_done(gst_topk_done),
    .busy(gst_busy), .used(gst_used),
    .n_match(gst_match), .n_insert(gst_insert), .n_evict(gst_evict), .n_drop(gst_drop)
  );

  always_comb begin
    n_reads  = '0;
    n_writes = '0;
    n_skips  = '0;
    for (int p = 0; p < P; p++) begin
      n_reads  += read_ctr[p];
      n_writes += write_ctr[p];
      n_skips  += skip_ctr[p];
    end
  end

  assign busy = ctrl_busy || gst_busy || !in_ready;

endmodule
