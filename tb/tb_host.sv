// tb_host: host-processor model and checker shared by the end-to-end
// testbenches of meloppr_top.
//
// It plays the part of the CPU in the MeLoPPR flow: it builds a random
// undirected graph, answers NQ queries and checks every word the accelerator
// returns against its own integer model of the same computation.
//   per query: CLEAR; BFS of depth L1 from the seed; stream the sub-graph
//   (nodes in BFS order, seed = local id 0, seed score
//   Max = ceil(dmax/2) * |G_L| * 2^Q, where dmax is the largest degree in G_L
//   and the extra 2^Q keeps the first shifted products away from zero); RUN with emit; check the
//   next-stage candidates; pick the NS largest; for each, BFS of depth L2,
//   SEED with the returned value, RUN as final stage; TOPK and check.
// The model repeats the integer diffusion (truncating division, shift by Q),
// the drain order (PE-major) and the global table's match / append / evict /
// drop rule, so the comparison is exact. It also computes a double-precision
// PPR of depth L1+L2 on the whole graph and prints the top-k precision of
// the accelerator's answer (informative, not a check).
// With FINISH = 0 it only sets `finished`, for a testbench that runs
// several accelerators side by side and reports once.
// Mechanism counts (write-conflict stalls, global-table matches, inserts,
// evictions, first- and final-stage runs, next-stage candidates) must each
// be non-zero: stalls only when P > 1, final runs and matches only when
// NS > 0, evictions only when EXPECT_EVICT is
// set.
module tb_host
  import meloppr_pkg::*;
#(
  parameter int unsigned P        = 4,
  parameter int unsigned NODES_PE = 64,
  parameter int unsigned GST_SIZE = 16,
  parameter int unsigned TOP_K    = 8,
  parameter int unsigned NG       = 80,    // graph nodes
  parameter int unsigned NE       = 160,   // graph edges
  parameter int unsigned NQ       = 2,     // queries
  parameter int unsigned NS       = 3,     // next-stage nodes per query
  parameter int unsigned L1       = 3,
  parameter int unsigned L2       = 3,
  parameter int unsigned ALPHA_P  = 870,   // alpha ~ 0.85
  parameter bit          EXPECT_EVICT = 1'b1,
  parameter int unsigned SEED     = 1,
  parameter int unsigned MAX_CYCLES = 2_000_000,
  parameter bit          FINISH   = 1'b1   // 0: set `finished` instead of ending the run
) (
  input  logic        clk,
  output logic        rst_n,
  output logic        in_valid,
  input  logic        in_ready,
  output host_word_t  in_word,
  input  logic        out_valid,
  output logic        out_ready,
  input  out_word_t   out_word,
  input  logic [31:0] stall_ctr,
  input  logic [31:0] n_iter,
  input  logic [31:0] n_res_sent,
  input  logic [31:0] gst_match,
  input  logic [31:0] gst_insert,
  input  logic [31:0] gst_evict,
  input  logic [31:0] gst_drop,
  input  logic [31:0] n_loaded,
  input  logic [31:0] n_reads,
  input  logic [31:0] n_writes,
  input  logic [31:0] n_skips,
  input  logic [$clog2(GST_SIZE+1)-1:0] gst_used
);

  int checks = 0, failures = 0;
  longint unsigned cycles = 0;
  bit finished = 1'b0;
  int hits_total = 0;        // top-k nodes also in the double-precision top-k
  int cands_total = 0;       // next-stage candidates returned

  // ---------------- graph ----------------
  int adj [NG][$];

  function automatic bit has_edge(int u, int v);
    foreach (adj[u][i]) if (adj[u][i] == v) return 1'b1;
    return 1'b0;
  endfunction

  task automatic build_graph();
    int made = 0;
    void'($urandom(SEED));
    // a ring keeps the graph connected, then random chords
    for (int v = 0; v < NG; v++) begin
      int w;
      w = (v + 1) % NG;
      if (!has_edge(v, w)) begin adj[v].push_back(w); adj[w].push_back(v); made++; end
    end
    while (made < NE) begin
      int u, w;
      u = $urandom % NG;
      // preferential: half of the chords touch a low id, giving hubs
      w = ($urandom % 2) ? ($urandom % (NG / 8 + 1)) : ($urandom % NG);
      if (u != w && !has_edge(u, w)) begin
        adj[u].push_back(w); adj[w].push_back(u); made++;
      end
    end
  endtask

  // BFS of given depth; returns the nodes in BFS order
  task automatic bfs(input int s, input int depth, output int nodes[$]);
    int dst [NG];
    int head = 0;
    foreach (dst[i]) dst[i] = -1;
    nodes = {};
    nodes.push_back(s); dst[s] = 0;
    while (head < nodes.size()) begin
      int u;
      u = nodes[head++];
      if (dst[u] < depth)
        foreach (adj[u][i]) if (dst[adj[u][i]] < 0) begin
          dst[adj[u][i]] = dst[u] + 1;
          nodes.push_back(adj[u][i]);
        end
    end
  endtask

  // ---------------- stream driving ----------------
  out_word_t rx [$];

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (out_valid && out_ready) rx.push_back(out_word);
  end
  always @(negedge clk) out_ready <= ($urandom % 4) != 0;   // random back-pressure

  task automatic send(op_e op, int unsigned a, int unsigned b);
    in_word  = '{op: op, a: a, b: b};
    in_valid = 1'b1;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic wait_done(output out_word_t got[$]);
    got = {};
    forever begin
      while (rx.size() == 0) @(negedge clk);
      begin
        out_word_t w = rx.pop_front();
        if (w.tag == TAG_DONE) break;
        got.push_back(w);
      end
    end
  endtask

  // ---------------- reference model ----------------
  int unsigned g_id    [$];   // global table model
  int unsigned g_score [$];
  int unsigned m_match, m_insert, m_evict, m_drop;
  int unsigned m_writes, m_skips;   // model counts of the last propagation

  // status ports after a RUN: sub-graph size, last propagation's counters,
  // global-table fill
  task automatic check_status(input int n);
    check(n_loaded == n && n_reads == n && n_writes == m_writes && n_skips == m_skips,
          $sformatf("status loaded/reads/writes/skips %0d/%0d/%0d/%0d expected %0d/%0d/%0d/%0d",
                    n_loaded, n_reads, n_writes, n_skips, n, n, m_writes, m_skips));
    check(gst_used == g_id.size(),
          $sformatf("global table holds %0d entries, expected %0d", gst_used, g_id.size()));
  endtask

  function automatic int unsigned scale_m(longint unsigned s, longint unsigned c);
    return int'((s * c) >> Q_SHIFT);
  endfunction

  task automatic gst_model_add(int unsigned id, int unsigned sc);
    int mi = 0; longint unsigned mv = 64'hffff_ffff;
    foreach (g_id[i]) begin
      if (g_id[i] == id) begin g_score[i] += sc; m_match++; return; end
      if (g_score[i] < mv) begin mv = g_score[i]; mi = i; end
    end
    if (g_id.size() < GST_SIZE) begin g_id.push_back(id); g_score.push_back(sc); m_insert++; end
    else if (sc > mv) begin g_id[mi] = id; g_score[mi] = sc; m_evict++; end
    else m_drop++;
  endtask

  // one sub-graph diffusion; appends expected next-stage words to exp_res
  task automatic model_run(input int nodes[$], input int unsigned seed_val, input int depth,
                           input bit fin, input bit emit, output out_word_t exp_res[$]);
    int n = nodes.size();
    int lid_of [NG];
    int unsigned r[$], nr[$], acc[$], dg[$];
    int unsigned a = 1 << Q_SHIFT;
    foreach (lid_of[i]) lid_of[i] = -1;
    foreach (nodes[i]) lid_of[nodes[i]] = i;
    for (int i = 0; i < n; i++) begin
      int d;
      d = 0;
      foreach (adj[nodes[i]][j]) if (lid_of[adj[nodes[i]][j]] >= 0) d++;
      dg.push_back(d); r.push_back(0); acc.push_back(0); nr.push_back(0);
    end
    r[0] = seed_val;
    m_writes = 0;
    m_skips  = 0;
    for (int k = 0; k <= depth; k++) begin
      int unsigned coef;
      coef = (k < depth) ? ((((1 << Q_SHIFT) - ALPHA_P) * a) >> Q_SHIFT)
                                      : (fin ? a : 0);
      for (int i = 0; i < n; i++) acc[i] += scale_m(r[i], coef);
      if (k < depth) begin
        for (int i = 0; i < n; i++) nr[i] = 0;
        m_writes = 0;
        m_skips  = 0;
        for (int i = 0; i < n; i++)
          if (r[i] == 0 || dg[i] == 0) m_skips++;
          else begin
            int unsigned sh;
            m_writes += dg[i];
            sh = r[i] / dg[i];
            foreach (adj[nodes[i]][j]) if (lid_of[adj[nodes[i]][j]] >= 0)
              nr[lid_of[adj[nodes[i]][j]]] += sh;
          end
        for (int i = 0; i < n; i++) r[i] = nr[i];
        a = (a * ALPHA_P) >> Q_SHIFT;
      end
    end
    // drain in PE-major order
    exp_res = {};
    for (int p = 0; p < P; p++)
      for (int i = p; i < n; i += P) begin
        if (acc[i] != 0) gst_model_add(nodes[i], acc[i]);
        if (emit && r[i] != 0)
          exp_res.push_back('{tag: TAG_RES, a: nodes[i], b: scale_m(r[i], a)});
      end
  endtask

  task automatic load_subgraph(input int nodes[$], input int depth, input bit fin, input bit emit);
    int lid_of [NG];
    foreach (lid_of[i]) lid_of[i] = -1;
    foreach (nodes[i]) lid_of[nodes[i]] = i;
    send(OP_CFG, (32'(emit) << 21) | (32'(fin) << 20) | (32'(depth) << 16) | ALPHA_P, 0);
    foreach (nodes[i]) begin
      int nb[$];
      nb = {};
      foreach (adj[nodes[i]][j]) if (lid_of[adj[nodes[i]][j]] >= 0) nb.push_back(lid_of[adj[nodes[i]][j]]);
      send(OP_NODE, nodes[i], nb.size());
      foreach (nb[j]) send(OP_NBR, nb[j], 0);
    end
  endtask

  // double-precision PPR of depth L on the whole graph, Eq. (1)
  task automatic float_ppr(input int s, input int L, output int top[$]);
    real sv [NG], x [NG], nx [NG];
    real alpha = real'(ALPHA_P) / real'(1 << Q_SHIFT);
    real wk = 1.0;
    bit taken [NG];
    foreach (x[i]) begin x[i] = 0.0; sv[i] = 0.0; taken[i] = 0; end
    x[s] = 1.0;
    for (int k = 0; k <= L; k++) begin
      for (int i = 0; i < NG; i++) sv[i] += ((k < L) ? (1.0 - alpha) * wk : wk) * x[i];
      if (k < L) begin
        foreach (nx[i]) nx[i] = 0.0;
        for (int u = 0; u < NG; u++)
          foreach (adj[u][j]) nx[adj[u][j]] += x[u] / real'(adj[u].size());
        foreach (x[i]) x[i] = nx[i];
        wk *= alpha;
      end
    end
    top = {};
    for (int t = 0; t < TOP_K; t++) begin
      int bi;
      bi = -1;
      for (int i = 0; i < NG; i++) if (!taken[i] && (bi < 0 || sv[i] > sv[bi])) bi = i;
      taken[bi] = 1; top.push_back(bi);
    end
  endtask

  // ---------------- main ----------------
  int cnt_stage1 = 0, cnt_final = 0, cnt_res_words = 0, cnt_topk = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    in_valid = 1'b0;
    in_word  = '0;
    rst_n    = 1'b0;
    build_graph();
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int q = 0; q < NQ; q++) begin
      int s;
      int sub[$], big[$];
      int unsigned maxd, max_val;
      out_word_t got[$], exp_res[$], cand[$];
      int ref_top[$];
      int hit;
      s = (q * 37 + 3) % NG;
      maxd = 1;
      hit = 0;

      g_id = {}; g_score = {};
      m_match = 0; m_insert = 0; m_evict = 0; m_drop = 0;
      send(OP_CLEAR, 0, 0);
      wait_done(got);
      check(got.size() == 0, "CLEAR returns only DONE");

      // stage one
      bfs(s, L1 + L2, big);
      foreach (big[i]) if (adj[big[i]].size() > maxd) maxd = adj[big[i]].size();
      max_val = ((maxd + 1) / 2) * big.size() * 1024;
      bfs(s, L1, sub);
      load_subgraph(sub, L1, 1'b0, 1'b1);
      send(OP_SEED, 0, max_val);
      send(OP_RUN, 0, 0);
      wait_done(got);
      model_run(sub, max_val, L1, 1'b0, 1'b1, exp_res);
      check_status(sub.size());
      cnt_stage1++;
      check(got.size() == exp_res.size(),
            $sformatf("q%0d stage-1 candidates: got %0d expected %0d", q, got.size(), exp_res.size()));
      foreach (exp_res[i])
        if (i < got.size())
          check(got[i] == exp_res[i],
                $sformatf("q%0d candidate %0d: got id %0d val %0d, expected id %0d val %0d",
                          q, i, got[i].a, got[i].b, exp_res[i].a, exp_res[i].b));
      cnt_res_words += got.size();

      // pick the NS largest candidates
      cand = got;
      cand.rsort(w) with (w.b);
      for (int j = 0; j < NS && j < cand.size(); j++) begin
        int sub2[$];
        sub2 = {};
        bfs(int'(cand[j].a), L2, sub2);
        load_subgraph(sub2, L2, 1'b1, 1'b0);
        send(OP_SEED, 0, cand[j].b);
        send(OP_RUN, 0, 0);
        wait_done(got);
        model_run(sub2, cand[j].b, L2, 1'b1, 1'b0, exp_res);
        check_status(sub2.size());
        cnt_final++;
        check(got.size() == 0, "final-stage run returns only DONE");
      end

      // result
      send(OP_TOPK, 0, 0);
      wait_done(got);
      begin
        int exp_n;
        bit sent [$];
        exp_n = (g_id.size() < TOP_K) ? g_id.size() : TOP_K;
        sent = {};
        foreach (g_id[i]) sent.push_back(1'b0);
        check(got.size() == exp_n, $sformatf("q%0d top-k count %0d expected %0d", q, got.size(), exp_n));
        for (int t = 0; t < exp_n && t < got.size(); t++) begin
          int bi;
          bi = -1;
          foreach (g_id[i]) if (!sent[i] && (bi < 0 || g_score[i] > g_score[bi])) bi = i;
          sent[bi] = 1'b1;
          check(got[t].a == g_id[bi] && got[t].b == g_score[bi],
                $sformatf("q%0d top-%0d: got (%0d,%0d) expected (%0d,%0d)",
                          q, t, got[t].a, got[t].b, g_id[bi], g_score[bi]));
        end
        cnt_topk += got.size();
      end
      check(gst_match == m_match && gst_insert == m_insert &&
            gst_evict == m_evict && gst_drop == m_drop,
            $sformatf("q%0d table counters %0d/%0d/%0d/%0d expected %0d/%0d/%0d/%0d", q,
                      gst_match, gst_insert, gst_evict, gst_drop, m_match, m_insert, m_evict, m_drop));
      float_ppr(s, L1 + L2, ref_top);
      foreach (ref_top[i]) foreach (got[j]) if (got[j].a == ref_top[i]) hit++;
      hits_total += hit;
      cands_total += cand.size();
      $display("query %0d: seed %0d, |G_l1| = %0d, %0d candidates, top-%0d precision vs float PPR = %0d/%0d, cycles so far %0d",
               q, s, sub.size(), cand.size(), TOP_K, hit, TOP_K, cycles);
    end

    $display("mechanisms: stalls=%0d stage1_runs=%0d final_runs=%0d candidates=%0d gst_match=%0d gst_insert=%0d gst_evict=%0d topk_words=%0d iterations=%0d",
             stall_ctr, cnt_stage1, cnt_final, cnt_res_words, gst_match, gst_insert, gst_evict, cnt_topk, n_iter);
    if (P > 1) check(stall_ctr > 0, "no write-conflict stall happened");
    check(cnt_stage1 > 0, "no first-stage run");
    if (NS > 0) check(cnt_final > 0, "no final-stage run");
    check(n_res_sent > 0 && cnt_res_words > 0, "next-stage candidates were returned");
    if (NS > 0) check(gst_match > 0, "no global-table match happened");
    check(gst_insert > 0, "no global-table insert happened");
    if (EXPECT_EVICT) check(gst_evict > 0, "no global-table eviction happened");
    check(cnt_topk > 0, "no top-k output");
    finished = 1'b1;
    if (FINISH) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("FAIL: watchdog after %0d cycles", MAX_CYCLES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
