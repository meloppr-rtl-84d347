// tb_accumulator: the accumulator against behavioural score tables. For a
// random coefficient it checks pi^a += (coef * r_next) >> Q for every node,
// that the old cur bank is cleared, that the banks swap exactly once per
// pass, that nodes beyond n_nodes are untouched, and the pass length of
// n_nodes + 2 busy cycles.
module tb_accumulator;
  import meloppr_pkg::*;
  localparam int NODES = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, start, busy, x_clr, swap, a_wen;
  logic [COEF_W-1:0]  coef;
  logic [4:0]         n_nodes;
  logic [3:0]         x_addr, a_addr;
  logic [SCORE_W-1:0] x_data, a_rdata, a_wdata;

  longint unsigned m_next [NODES], m_cur [NODES], m_acc [NODES];
  int swaps;
  assign x_data  = SCORE_W'(m_next[x_addr]);
  assign a_rdata = SCORE_W'(m_acc[a_addr]);
  always @(posedge clk) begin
    if (a_wen) m_acc[a_addr] <= a_wdata;
    if (x_clr) m_cur[x_addr] <= 0;
    if (swap)  swaps <= swaps + 1;
  end

  accumulator #(.NODES(NODES)) dut (.*);

  initial begin
    rst_n = 0; start = 0; coef = 0; n_nodes = 0; swaps = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      longint unsigned exp_acc [NODES];
      int n, cyc;
      n = (t == 2) ? 0 : 1 + $urandom % NODES;
      for (int i = 0; i < NODES; i++) begin
        m_next[i] = $urandom; m_cur[i] = 1 + $urandom % 100; m_acc[i] = $urandom % 1000000;
      end
      coef = (t == 5) ? 11'd1024 : COEF_W'($urandom % 1025);
      for (int i = 0; i < NODES; i++)
        exp_acc[i] = (i < n) ? ((m_acc[i] + ((m_next[i] * coef) >> 10)) & 32'hffff_ffff) : m_acc[i];
      n_nodes = 5'(n);
      swaps = 0; cyc = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      coef = COEF_W'($urandom);   // the pass must use the value latched at start
      while (busy) begin @(negedge clk); cyc++; end
      for (int i = 0; i < NODES; i++) begin
        checks++;
        if (m_acc[i] != exp_acc[i] || (i < n && m_cur[i] != 0) || (i >= n && m_cur[i] == 0)) begin
          failures++; $display("FAIL t%0d node %0d: acc %0d expected %0d, cur %0d", t, i, m_acc[i], exp_acc[i], m_cur[i]);
        end
      end
      checks++;
      if (swaps != 1) begin failures++; $display("FAIL t%0d: %0d swaps", t, swaps); end
      checks++;
      if (cyc != n + 2) begin failures++; $display("FAIL t%0d: busy %0d cycles, expected %0d", t, cyc, n + 2); end
    end
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
