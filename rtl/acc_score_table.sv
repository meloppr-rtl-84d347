// acc_score_table: accumulated-score table of one processing element.
//
// Each entry belongs to one node the PE owns and holds the node's global id
// and its accumulated score pi^a, two words per node as in the paper's memory
// count (B_a). The global id travels with the score so that the drain can
// aggregate the score into the global top-ck table without another lookup.
//
// Ports: the loader's init port writes the global id and clears pi^a; the
// accumulator reads pi^a and writes the updated value back at the same
// address (read-modify-write in one cycle); the drain port reads an entry.
// Reads are asynchronous, writes happen at the clock edge (this design's
// choice). The init and accumulator ports are never used in the same cycle.
module acc_score_table
  import meloppr_pkg::*;
#(
  parameter int unsigned NODES = 2048,
  localparam int unsigned NA_W = $clog2(NODES)
) (
  input  logic               clk,
  // loader
  input  logic               iw_en,
  input  logic [NA_W-1:0]    iw_addr,
  input  logic [GID_W-1:0]   iw_gid,
  // accumulator
  input  logic [NA_W-1:0]    a_addr,
  output logic [SCORE_W-1:0] a_rdata,
  input  logic               a_wen,
  input  logic [SCORE_W-1:0] a_wdata,
  // drain
  input  logic [NA_W-1:0]    d_addr,
  output logic [GID_W-1:0]   d_gid,
  output logic [SCORE_W-1:0] d_acc
);

  logic [GID_W-1:0]   gid_mem [NODES];
  logic [SCORE_W-1:0] acc_mem [NODES];

  always_ff @(posedge clk) begin
    if (iw_en) begin
      gid_mem[iw_addr] <= iw_gid;
      acc_mem[iw_addr] <= '0;
    end else if (a_wen) begin
      acc_mem[a_addr] <= a_wdata;
    end
  end

  assign a_rdata = acc_mem[a_addr];
  assign d_gid   = gid_mem[d_addr];
  assign d_acc   = acc_mem[d_addr];

endmodule
