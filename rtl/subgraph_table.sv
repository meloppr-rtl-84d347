// subgraph_table: the sub-graph store of one processing element.
//
// For every node the PE owns it keeps two words, the address of the node's
// first and of its last neighbour in the neighbour list, and the neighbour
// list itself holds the local ids of those neighbours, one per entry. This
// is the layout the paper draws for the "Sub-graph Table" (first neighbor
// addr / last neighbor addr / neighbor list) and counts as 2|V| + 2|E| words.
// Both addresses are inclusive, so a node's degree is last - first + 1.
//
// Interface: a node-record write port and a neighbour write port, used by the
// host loader, and two read ports used by the diffuser. Reads are
// asynchronous (the data follows the address in the same cycle); writes take
// effect at the clock edge. Asynchronous reads are this design's choice: they
// let the diffuser fetch one neighbour per cycle without a read pipeline.
module subgraph_table #(
  parameter int unsigned NODES = 2048,  // node records
  parameter int unsigned EDGES = 8192,  // neighbour-list entries
  parameter int unsigned LID_W = 15,    // width of a local node id
  localparam int unsigned NA_W = $clog2(NODES),
  localparam int unsigned EA_W = $clog2(EDGES)
) (
  input  logic             clk,
  // loader: node record
  input  logic             nw_en,
  input  logic [NA_W-1:0]  nw_addr,
  input  logic [EA_W-1:0]  nw_first,
  input  logic [EA_W-1:0]  nw_last,
  // loader: neighbour entry
  input  logic             ew_en,
  input  logic [EA_W-1:0]  ew_addr,
  input  logic [LID_W-1:0] ew_data,
  // diffuser: node record read
  input  logic [NA_W-1:0]  nr_addr,
  output logic [EA_W-1:0]  nr_first,
  output logic [EA_W-1:0]  nr_last,
  // diffuser: neighbour read
  input  logic [EA_W-1:0]  er_addr,
  output logic [LID_W-1:0] er_data
);

  logic [EA_W-1:0]  first_mem [NODES];
  logic [EA_W-1:0]  last_mem  [NODES];
  logic [LID_W-1:0] nbr_mem   [EDGES];

  always_ff @(posedge clk) begin
    if (nw_en) begin
      first_mem[nw_addr] <= nw_first;
      last_mem[nw_addr]  <= nw_last;
    end
    if (ew_en) nbr_mem[ew_addr] <= ew_data;
  end

  assign nr_first = first_mem[nr_addr];
  assign nr_last  = last_mem[nr_addr];
  assign er_data  = nbr_mem[er_addr];

endmodule
