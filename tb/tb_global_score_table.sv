// tb_global_score_table: a 12-entry table fed with random (id, score)
// pairs from a pool of 30 ids, so that matches, appends, evictions of the
// smallest entry and drops all occur. A model in the testbench applies the
// same rule; the counters and the top-4 readout (largest first, first entry
// on ties, under random back-pressure) are compared after each round, and a
// clear must empty the table. Also checks the cost of one input,
// used + 2 cycles.
module tb_global_score_table;
  import meloppr_pkg::*;
  localparam int SIZE = 12, K = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, clear, in_valid, in_ready, topk_start, out_valid, out_ready, topk_done, busy;
  logic [GID_W-1:0]   in_gid, out_gid;
  logic [SCORE_W-1:0] in_score, out_score;
  logic [3:0]         used;
  logic [31:0]        n_match, n_insert, n_evict, n_drop;

  global_score_table #(.SIZE(SIZE), .K(K)) dut (.*);

  int unsigned m_id [$], m_sc [$];
  int mm, mi, me, md;

  task automatic model_add(int unsigned id, int unsigned sc);
    int idx; longint unsigned mv;
    idx = 0; mv = 64'hffff_ffff;
    foreach (m_id[i]) begin
      if (m_id[i] == id) begin m_sc[i] += sc; mm++; return; end
      if (m_sc[i] < mv) begin mv = m_sc[i]; idx = i; end
    end
    if (m_id.size() < SIZE) begin m_id.push_back(id); m_sc.push_back(sc); mi++; end
    else if (sc > mv) begin m_id[idx] = id; m_sc[idx] = sc; me++; end
    else md++;
  endtask


  initial begin
    rst_n = 0; out_ready = 0; clear = 0; in_valid = 0; topk_start = 0; in_gid = 0; in_score = 0;
    mm = 0; mi = 0; me = 0; md = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      for (int n = 0; n < 40; n++) begin
        int cyc, u;
        bit present;
        in_gid = $urandom % 30; in_score = 1 + $urandom % 1000; in_valid = 1;
        u = m_id.size();
        present = 0;
        foreach (m_id[i]) if (m_id[i] == in_gid) present = 1;
        while (!in_ready) @(negedge clk);
        @(negedge clk); in_valid = 0;
        model_add(in_gid, in_score);
        cyc = 0;
        while (busy) begin @(negedge clk); cyc++; end
        if (!present) begin
          checks++;
          if (cyc != u + 2) begin failures++; $display("FAIL input took %0d cycles, used %0d", cyc, u); end
        end
      end
      checks++;
      if (n_match != mm || n_insert != mi || n_evict != me || n_drop != md || used != m_id.size()) begin
        failures++; $display("FAIL counters %0d %0d %0d %0d used %0d expected %0d %0d %0d %0d %0d", n_match, n_insert, n_evict, n_drop, used, mm, mi, me, md, m_id.size());
      end
      // top-k
      topk_start = 1; @(negedge clk); topk_start = 0;
      begin
        bit sent [SIZE];
        foreach (sent[i]) sent[i] = 0;
        for (int t = 0; t < K; t++) begin
          int bi;
          bi = -1;
          foreach (m_id[i]) if (!sent[i] && (bi < 0 || m_sc[i] > m_sc[bi])) bi = i;
          sent[bi] = 1;
          forever begin
            out_ready = ($urandom % 3) != 0;   // random back-pressure
            #1;
            if (out_valid && out_ready) break;
            @(negedge clk);
          end
          checks++;
          if (out_gid != m_id[bi] || out_score != m_sc[bi]) begin
            failures++; $display("FAIL top-%0d (%0d,%0d) expected (%0d,%0d)", t, out_gid, out_score, m_id[bi], m_sc[bi]);
          end
          @(negedge clk);
          out_ready = 0;
        end
        while (!topk_done) begin
          checks++;
          if (out_valid) begin failures++; $display("FAIL extra top-k output"); end
          @(negedge clk);
        end
        @(negedge clk);
      end
    end
    checks++;
    if (me == 0 || md == 0 || mm == 0) begin failures++; $display("FAIL: eviction/drop/match not exercised"); end
    clear = 1; @(negedge clk); clear = 0;
    checks++;
    if (used != 0 || n_insert != 0) begin failures++; $display("FAIL clear"); end
    // top-k of an empty table ends at once
    topk_start = 1; @(negedge clk); topk_start = 0;
    repeat (3) begin
      checks++;
      if (out_valid) begin failures++; $display("FAIL output from empty table"); end
      @(negedge clk);
    end
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
