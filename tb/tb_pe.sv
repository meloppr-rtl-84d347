// tb_pe: one processing element running a whole diffusion on its own. The
// PE's write requests are looped back to its own update port (as the
// scheduler does when P = 1), granted on random cycles. The testbench loads
// a random 20-node graph, seeds node 0, runs accumulate / propagate /
// accumulate ... for depth 3 with alpha = 870/1024 and the weights of
// Eq. (1), then compares pi^a, the residuals and the global ids on the
// drain port with an integer model of the same computation.
module tb_pe;
  import meloppr_pkg::*;
  localparam int NODES = 32, EDGES = 128, LID_W = 5, N = 20, DEPTH = 3, ALPHA = 870;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, nw_en, ew_en, seed_en, diff_start, diff_busy, acc_start, acc_busy;
  logic [4:0]         nw_addr, seed_addr, d_addr, upd_addr;
  logic [6:0]         nw_first, nw_last, ew_addr;
  logic [GID_W-1:0]   nw_gid, d_gid;
  logic [LID_W-1:0]   ew_data, req_dest;
  logic [SCORE_W-1:0] seed_val, req_value, upd_val, d_acc, d_res;
  logic [5:0]         n_nodes;
  logic [COEF_W-1:0]  acc_coef;
  logic               req_valid, req_grant, upd_en;
  logic [31:0]        read_ctr, write_ctr, skip_ctr;

  pe #(.NODES(NODES), .EDGES(EDGES), .LID_W(LID_W)) dut (.*);

  // loop-back scheduler with random stalls
  logic gate;
  always @(negedge clk) gate <= ($urandom % 4) != 0;
  assign req_grant = req_valid && gate;
  assign upd_en    = req_grant;
  assign upd_addr  = req_dest;
  assign upd_val   = req_value;

  int adj [N][$];

  initial begin
    int unsigned r [N], acc [N], nr [N];
    int unsigned a, coef, seedv;
    int fill;
    rst_n = 0; nw_en = 0; ew_en = 0; seed_en = 0; diff_start = 0; acc_start = 0;
    nw_addr = 0; seed_addr = 0; d_addr = 0; nw_first = 0; nw_last = 0; ew_addr = 0;
    nw_gid = 0; ew_data = 0; seed_val = 0; n_nodes = 0; acc_coef = 0;
    for (int v = 0; v < N; v++) begin
      int w;
      w = (v + 1) % N; adj[v].push_back(w); adj[w].push_back(v);
    end
    for (int e = 0; e < 15; e++) begin
      int u, w;
      u = $urandom % N; w = $urandom % N;
      if (u != w) begin adj[u].push_back(w); adj[w].push_back(u); end
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // load
    fill = 0;
    for (int v = 0; v < N; v++) begin
      nw_en = 1; nw_addr = 5'(v); nw_gid = 1000 + v;
      nw_first = 7'(fill); nw_last = 7'(fill + adj[v].size() - 1);
      @(negedge clk); nw_en = 0;
      foreach (adj[v][j]) begin
        ew_en = 1; ew_addr = 7'(fill); ew_data = LID_W'(adj[v][j]); fill++;
        @(negedge clk);
      end
      ew_en = 0;
    end
    n_nodes = 6'(N);
    seedv = 32'd50_000_000;
    seed_en = 1; seed_addr = 0; seed_val = seedv; @(negedge clk); seed_en = 0;
    // model
    foreach (r[i]) begin r[i] = 0; acc[i] = 0; end
    r[0] = seedv;
    a = 1024;
    for (int k = 0; k <= DEPTH; k++) begin
      coef = (k < DEPTH) ? (((1024 - ALPHA) * a) >> 10) : a;
      for (int i = 0; i < N; i++) acc[i] += int'((longint'(r[i]) * coef) >> 10);
      // hardware: accumulate pass
      acc_coef = COEF_W'(coef);
      acc_start = 1; @(negedge clk); acc_start = 0;
      while (acc_busy) @(negedge clk);
      if (k < DEPTH) begin
        foreach (nr[i]) nr[i] = 0;
        for (int i = 0; i < N; i++) if (r[i] != 0)
          foreach (adj[i][j]) nr[adj[i][j]] += r[i] / adj[i].size();
        r = nr;
        a = (a * ALPHA) >> 10;
        diff_start = 1; @(negedge clk); diff_start = 0;
        while (diff_busy) @(negedge clk);
      end
    end
    for (int i = 0; i < N; i++) begin
      d_addr = 5'(i); #1;
      checks++;
      if (d_gid != 1000 + i || d_acc != acc[i] || d_res != r[i]) begin
        failures++; $display("FAIL node %0d: gid %0d acc %0d res %0d, expected %0d %0d", i, d_gid, d_acc, d_res, acc[i], r[i]);
      end
    end
    checks++;
    if (read_ctr != N) begin failures++; $display("FAIL read_ctr %0d", read_ctr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
