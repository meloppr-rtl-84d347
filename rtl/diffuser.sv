// diffuser: the propagation engine of one processing element.
//
// One propagation computes W * S_l for the nodes this PE owns, where
// W = A * D^-1: every node u with a non-zero residual r(u) gives the share
// r(u) / d_u to each of its d_u neighbours. The diffuser walks its PE's node
// records in order; for a node it reads the first/last neighbour address and
// the residual, divides once (integer division, truncating, built from logic
// as in the paper), then reads the neighbour list one entry per cycle and
// issues one score write request (neighbour local id, share) per entry. A
// request stays up until the scheduler grants it; the write may go to any
// PE's residual table, which is why writes are arbitrated. Nodes whose
// residual is zero, which early in a diffusion are most of them, are skipped
// without a request; that skip is this design's choice. So is skipping a node
// without neighbours (a degree-0 record, which the host may send for an
// isolated seed): its residual goes nowhere, as for a dangling node in W.
//
// Counters: read_ctr counts node records read and write_ctr granted writes
// in the current propagation (the M_read_ctr / M_write_ctr of the paper's
// block diagram); skip_ctr counts skipped nodes (zero residual or
// no neighbours).
//
// Timing: start is a one-cycle pulse; busy rises the next cycle. A node costs
// one cycle plus one cycle per granted neighbour write.
module diffuser
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
  input  logic               start,
  input  logic [NA_W:0]      n_nodes,     // nodes owned by this PE
  output logic               busy,
  // sub-graph table
  output logic [NA_W-1:0]    nr_addr,
  input  logic [EA_W-1:0]    nr_first,
  input  logic [EA_W-1:0]    nr_last,
  output logic [EA_W-1:0]    er_addr,
  input  logic [LID_W-1:0]   er_data,
  // residual table, cur bank
  output logic [NA_W-1:0]    r_addr,
  input  logic [SCORE_W-1:0] r_data,
  // score write request to the scheduler
  output logic               req_valid,
  output logic [LID_W-1:0]   req_dest,
  output logic [SCORE_W-1:0] req_value,
  input  logic               req_grant,
  // statistics
  output logic [31:0]        read_ctr,
  output logic [31:0]        write_ctr,
  output logic [31:0]        skip_ctr
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_SEND} state_e;
  state_e state;

  logic [NA_W:0]      addr;
  logic [EA_W-1:0]    e, e_last;
  logic [SCORE_W-1:0] share;
  logic [EA_W-1:0]    deg_m1;
  logic [EA_W:0]      deg;
  logic               empty;

  assign deg_m1 = nr_last - nr_first;
  assign deg    = {1'b0, deg_m1} + 1'b1;
  // a node sent with degree 0 is stored with last = first - 1
  assign empty  = (nr_last + 1'b1 == nr_first);

  assign nr_addr   = addr[NA_W-1:0];
  assign r_addr    = addr[NA_W-1:0];
  assign er_addr   = e;
  assign req_valid = (state == S_SEND);
  assign req_dest  = er_data;
  assign req_value = share;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      addr      <= '0;
      e         <= '0;
      e_last    <= '0;
      share     <= '0;
      read_ctr  <= '0;
      write_ctr <= '0;
      skip_ctr  <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          addr      <= '0;
          read_ctr  <= '0;
          write_ctr <= '0;
          skip_ctr  <= '0;
          state     <= S_FETCH;
        end
        S_FETCH: begin
          if (addr == n_nodes) begin
            state <= S_IDLE;
          end else begin
            read_ctr <= read_ctr + 1;
            if (r_data == '0 || empty) begin
              skip_ctr <= skip_ctr + 1;
              addr     <= addr + 1'b1;
            end else begin
              share  <= r_data / SCORE_W'(deg);
              e      <= nr_first;
              e_last <= nr_last;
              state  <= S_SEND;
            end
          end
        end
        S_SEND: if (req_grant) begin
          write_ctr <= write_ctr + 1;
          if (e == e_last) begin
            addr  <= addr + 1'b1;
            state <= S_FETCH;
          end else begin
            e <= e + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a request, once raised, keeps its destination and value until granted
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      req_valid && !req_grant |=> req_valid && $stable(req_dest) && $stable(req_value);
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
