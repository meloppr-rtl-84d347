// tb_diffuser: the diffuser against a behavioural sub-graph and residual
// table held in the testbench. It checks the order and content of every
// score write request (neighbour id, residual / degree), the skip of
// zero-residual and neighbourless nodes, the read/write/skip counters, that a request holds
// until granted under random grants, and, with every request granted at
// once, the cycle count n_nodes + writes + 1.
module tb_diffuser;
  import meloppr_pkg::*;
  localparam int NODES = 16, EDGES = 64, LID_W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, start, busy, req_valid, req_grant;
  logic [4:0]         n_nodes;
  logic [3:0]         nr_addr, r_addr;
  logic [5:0]         nr_first, nr_last, er_addr;
  logic [LID_W-1:0]   er_data, req_dest;
  logic [SCORE_W-1:0] r_data, req_value;
  logic [31:0]        read_ctr, write_ctr, skip_ctr;

  int unsigned m_first [NODES], m_last [NODES], m_nbr [EDGES], m_res [NODES];
  assign nr_first = 6'(m_first[nr_addr]);
  assign nr_last  = 6'(m_last[nr_addr]);
  assign er_data  = LID_W'(m_nbr[er_addr]);
  assign r_data   = m_res[r_addr];

  diffuser #(.NODES(NODES), .EDGES(EDGES), .LID_W(LID_W)) dut (.*);

  int unsigned got_d [$], got_v [$];
  bit always_grant;
  always @(posedge clk) if (req_valid && req_grant) begin got_d.push_back(req_dest); got_v.push_back(req_value); end
  always @(negedge clk) req_grant <= always_grant ? 1'b1 : ($urandom % 3 == 0);

  task automatic run_case(int n, bit grant_all);
    int unsigned exp_d [$], exp_v [$];
    int fill = 0, zeros = 0, cyc = 0;
    for (int i = 0; i < n; i++) begin
      int deg;
      deg = ($urandom % 8 == 0) ? 0 : 1 + $urandom % 4;  // some nodes without neighbours
      m_first[i] = fill; m_last[i] = fill + deg - 1;
      for (int e = 0; e < deg; e++) m_nbr[fill + e] = $urandom % 200;
      fill += deg;
      m_res[i] = ($urandom % 3 == 0) ? 0 : $urandom % 100000;
      if (m_res[i] == 0 || deg == 0) zeros++;
      else for (int e = 0; e < deg; e++) begin exp_d.push_back(m_nbr[m_first[i] + e]); exp_v.push_back(m_res[i] / deg); end
    end
    got_d = {}; got_v = {};
    always_grant = grant_all;
    n_nodes = 5'(n);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) begin @(negedge clk); cyc++; end
    checks++;
    if (got_d.size() != exp_d.size()) begin failures++; $display("FAIL: %0d writes, expected %0d", got_d.size(), exp_d.size()); end
    foreach (exp_d[i]) if (i < got_d.size()) begin
      checks++;
      if (got_d[i] != exp_d[i] || got_v[i] != exp_v[i]) begin
        failures++; $display("FAIL write %0d: (%0d,%0d) expected (%0d,%0d)", i, got_d[i], got_v[i], exp_d[i], exp_v[i]);
      end
    end
    checks++;
    if (read_ctr != n || write_ctr != exp_d.size() || skip_ctr != zeros) begin
      failures++; $display("FAIL counters %0d %0d %0d expected %0d %0d %0d", read_ctr, write_ctr, skip_ctr, n, exp_d.size(), zeros);
    end
    if (grant_all) begin
      checks++;
      if (cyc != n + exp_d.size() + 1) begin   // one cycle per node and per write, one to finish
        failures++; $display("FAIL cycles %0d expected %0d", cyc, n + exp_d.size() + 1);
      end
    end
  endtask

  initial begin
    rst_n = 0; start = 0; n_nodes = 0; always_grant = 1;
    foreach (m_res[i]) begin m_res[i] = 0; m_first[i] = 0; m_last[i] = 0; end
    foreach (m_nbr[i]) m_nbr[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run_case(16, 1'b1);
    run_case(12, 1'b0);
    run_case(0, 1'b1);
    run_case(9, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
