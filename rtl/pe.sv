// pe: one processing element of the diffusion array.
//
// A PE owns the nodes whose local id v satisfies v mod P == its index and
// keeps them at address v div P. It holds the five parts the paper lists:
// the sub-graph table, the accumulated-score table, the residual-score
// table, the diffuser and the accumulator. The diffuser reads only this PE's
// tables; its write requests leave the PE towards the scheduler, and the
// scheduler's updates for this PE's nodes come back in on upd_*. The
// interleaved node-to-PE mapping is this design's choice (it spreads any
// sub-graph evenly over the PEs); the paper's block diagram only shows each
// PE holding a different group of nodes.
//
// Ports: loader writes (node record, neighbour, init of the score entries,
// seed), controller pulses (diff_start, acc_start with coefficient), the
// scheduler request/update pair, and the drain read port (global id, pi^a
// and current residual of one entry). Each part's timing is given in its
// own file.
module pe
  import meloppr_pkg::*;
#(
  parameter int unsigned NODES = 2048,
  parameter int unsigned EDGES = 8192,
  parameter int unsigned LID_W = 15,
  localparam int unsigned NA_W = $clog2(NODES),
  localparam int unsigned EA_W = $clog2(EDGES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // loader
  input  logic               nw_en,       // node record + score init
  input  logic [NA_W-1:0]    nw_addr,
  input  logic [EA_W-1:0]    nw_first,
  input  logic [EA_W-1:0]    nw_last,
  input  logic [GID_W-1:0]   nw_gid,
  input  logic               ew_en,
  input  logic [EA_W-1:0]    ew_addr,
  input  logic [LID_W-1:0]   ew_data,
  input  logic               seed_en,
  input  logic [NA_W-1:0]    seed_addr,
  input  logic [SCORE_W-1:0] seed_val,
  input  logic [NA_W:0]      n_nodes,
  // controller
  input  logic               diff_start,
  output logic               diff_busy,
  input  logic               acc_start,
  input  logic [COEF_W-1:0]  acc_coef,
  output logic               acc_busy,
  // scheduler
  output logic               req_valid,
  output logic [LID_W-1:0]   req_dest,
  output logic [SCORE_W-1:0] req_value,
  input  logic               req_grant,
  input  logic               upd_en,
  input  logic [NA_W-1:0]    upd_addr,
  input  logic [SCORE_W-1:0] upd_val,
  // drain
  input  logic [NA_W-1:0]    d_addr,
  output logic [GID_W-1:0]   d_gid,
  output logic [SCORE_W-1:0] d_acc,
  output logic [SCORE_W-1:0] d_res,
  // statistics
  output logic [31:0]        read_ctr,
  output logic [31:0]        write_ctr,
  output logic [31:0]        skip_ctr
);

  logic [NA_W-1:0]    nr_addr, r_addr, x_addr, a_addr;
  logic [EA_W-1:0]    nr_first, nr_last, er_addr;
  logic [LID_W-1:0]   er_data;
  logic [SCORE_W-1:0] r_data, x_data, a_rdata, a_wdata;
  logic               x_clr, swap, a_wen;

  subgraph_table #(.NODES(NODES), .EDGES(EDGES), .LID_W(LID_W)) u_sgt (
    .clk, .nw_en, .nw_addr, .nw_first, .nw_last,
    .ew_en, .ew_addr, .ew_data,
    .nr_addr, .nr_first, .nr_last, .er_addr, .er_data
  );

  acc_score_table #(.NODES(NODES)) u_acc_tbl (
    .clk,
    .iw_en(nw_en), .iw_addr(nw_addr), .iw_gid(nw_gid),
    .a_addr, .a_rdata, .a_wen, .a_wdata,
    .d_addr, .d_gid, .d_acc
  );

  res_score_table #(.NODES(NODES)) u_res_tbl (
    .clk, .rst_n,
    .init_en(nw_en), .init_addr(nw_addr),
    .seed_en, .seed_addr, .seed_val,
    .upd_en, .upd_addr, .upd_val,
    .r_addr, .r_data, .x_addr, .x_data, .x_clr, .swap,
    .d_addr, .d_data(d_res)
  );

  diffuser #(.NODES(NODES), .EDGES(EDGES), .LID_W(LID_W)) u_diff (
    .clk, .rst_n, .start(diff_start), .n_nodes, .busy(diff_busy),
    .nr_addr, .nr_first, .nr_last, .er_addr, .er_data,
    .r_addr, .r_data,
    .req_valid, .req_dest, .req_value, .req_grant,
    .read_ctr, .write_ctr, .skip_ctr
  );

  accumulator #(.NODES(NODES)) u_accum (
    .clk, .rst_n, .start(acc_start), .coef(acc_coef), .n_nodes, .busy(acc_busy),
    .x_addr, .x_data, .x_clr, .swap,
    .a_addr, .a_rdata, .a_wen, .a_wdata
  );

endmodule
