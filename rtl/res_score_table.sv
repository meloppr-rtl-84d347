// res_score_table: residual-score table of one processing element.
//
// The residual pi^r of a node is the part of W^l * S_0 that still has to be
// propagated. One propagation reads the residuals of iteration l and builds
// those of iteration l+1, so the table has two banks: "cur", read by the
// diffuser, and "next", into which the scheduler adds the shares that every
// diffuser sends to this PE's nodes. After the accumulator has consumed the
// next bank it zeroes the old cur bank entry by entry and the banks swap
// roles, so no copy is needed. The paper gives the table (one word per node,
// B_r); the two banks are this design's choice for keeping iteration l and
// l+1 apart.
//
// Ports:
//   init   zeroes both banks of a node when the loader writes its record
//   seed   sets the next bank entry (the initial vector S_0, seen by the
//          first accumulator pass exactly like the result of a propagation)
//   upd    next[addr] += value, one update per cycle from the scheduler
//   r_*    diffuser read of the cur bank
//   x_*    accumulator read of the next bank; x_clr zeroes cur[x_addr]
//   swap   exchanges the banks
//   d_*    drain read of the cur bank
// Reads are asynchronous; all writes happen at the clock edge. The ports are
// used in separate phases, never two write ports at once.
module res_score_table
  import meloppr_pkg::*;
#(
  parameter int unsigned NODES = 2048,
  localparam int unsigned NA_W = $clog2(NODES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               init_en,
  input  logic [NA_W-1:0]    init_addr,
  input  logic               seed_en,
  input  logic [NA_W-1:0]    seed_addr,
  input  logic [SCORE_W-1:0] seed_val,
  input  logic               upd_en,
  input  logic [NA_W-1:0]    upd_addr,
  input  logic [SCORE_W-1:0] upd_val,
  input  logic [NA_W-1:0]    r_addr,
  output logic [SCORE_W-1:0] r_data,
  input  logic [NA_W-1:0]    x_addr,
  output logic [SCORE_W-1:0] x_data,
  input  logic               x_clr,
  input  logic               swap,
  input  logic [NA_W-1:0]    d_addr,
  output logic [SCORE_W-1:0] d_data
);

  logic [SCORE_W-1:0] bank0 [NODES];
  logic [SCORE_W-1:0] bank1 [NODES];
  logic               sel;   // 0: bank0 is cur, 1: bank1 is cur

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sel <= 1'b0;
    else if (swap) sel <= ~sel;
  end

  always_ff @(posedge clk) begin
    if (init_en) begin
      bank0[init_addr] <= '0;
      bank1[init_addr] <= '0;
    end else if (seed_en) begin
      if (sel) bank0[seed_addr] <= seed_val;
      else     bank1[seed_addr] <= seed_val;
    end else if (upd_en) begin
      if (sel) bank0[upd_addr] <= bank0[upd_addr] + upd_val;
      else     bank1[upd_addr] <= bank1[upd_addr] + upd_val;
    end else if (x_clr) begin
      if (sel) bank1[x_addr] <= '0;
      else     bank0[x_addr] <= '0;
    end
  end

  assign r_data = sel ? bank1[r_addr] : bank0[r_addr];
  assign d_data = sel ? bank1[d_addr] : bank0[d_addr];
  assign x_data = sel ? bank0[x_addr] : bank1[x_addr];

endmodule
