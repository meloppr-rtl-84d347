// scheduler: routes the diffusers' score writes to the residual tables.
//
// Every diffuser may write to every PE's residual table, but a table takes
// one update per cycle. Node local id v lives in PE (v mod P) at address
// (v div P), so the destination bank of a request is its id's low bits. For
// each bank the scheduler grants, among the requests aimed at it, the first
// one at or after a round-robin pointer, and moves the pointer past the
// winner; the other requests wait (a conflict stall). Each diffuser has at
// most one request, so it gets at most one grant per cycle. The paper states
// that a scheduler resolves these conflicts; round-robin per bank is this
// design's choice.
//
// Outputs: the grants (combinational, same cycle as the requests), one
// update port per bank, all_idle when no diffuser is busy (the end of a
// propagation), and stall_ctr, the total number of request-cycles that lost
// arbitration since reset.
module scheduler
  import meloppr_pkg::*;
#(
  parameter int unsigned P     = 16,
  parameter int unsigned LID_W = 15,
  localparam int unsigned PB_W = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned NA_W = LID_W - $clog2(P)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [P-1:0]       req_valid,
  input  logic [LID_W-1:0]   req_dest  [P],
  input  logic [SCORE_W-1:0] req_value [P],
  output logic [P-1:0]       req_grant,
  input  logic [P-1:0]       diff_busy,
  output logic               all_idle,
  output logic [P-1:0]       upd_en,
  output logic [NA_W-1:0]    upd_addr [P],
  output logic [SCORE_W-1:0] upd_val  [P],
  output logic [31:0]        stall_ctr
);

  logic [PB_W-1:0] rr [P];
  logic [PB_W-1:0] winner [P];

  function automatic int unsigned bank_of(input logic [LID_W-1:0] v);
    return int'(v) % P;
  endfunction

  always_comb begin
    req_grant = '0;
    for (int b = 0; b < P; b++) begin
      upd_en[b]   = 1'b0;
      upd_addr[b] = '0;
      upd_val[b]  = '0;
      winner[b]   = '0;
      for (int k = 0; k < P; k++) begin
        logic [PB_W-1:0] i;  // requester index
        i = PB_W'((int'(rr[b]) + k) % P);
        if (!upd_en[b] && req_valid[i] && bank_of(req_dest[i]) == b) begin
          upd_en[b]    = 1'b1;
          upd_addr[b]  = NA_W'(req_dest[i] / LID_W'(P));
          upd_val[b]   = req_value[i];
          winner[b]    = PB_W'(i);
          req_grant[i] = 1'b1;
        end
      end
    end
  end

  assign all_idle = (diff_busy == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < P; b++) rr[b] <= '0;
      stall_ctr <= '0;
    end else begin
      for (int b = 0; b < P; b++)
        if (upd_en[b]) rr[b] <= PB_W'((int'(winner[b]) + 1) % P);
      stall_ctr <= stall_ctr + 32'($countones(req_valid & ~req_grant));
    end
  end

  // one grant per bank, grants only to requesters
  a_grant_subset: assert property (@(posedge clk) disable iff (!rst_n)
                                   (req_grant & ~req_valid) == '0);
  a_grant_count:  assert property (@(posedge clk) disable iff (!rst_n)
                                   $countones(req_grant) == $countones(upd_en));

endmodule
