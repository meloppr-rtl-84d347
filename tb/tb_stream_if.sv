// tb_stream_if: drives host words into the streaming interface (P = 2) and
// checks what it produces: configuration registers, node records (PE =
// id mod P, address = id div P, first/last neighbour address per PE),
// neighbour writes, seeds, per-PE node counts, the RUN / CLEAR / TOPK
// pulses, the returned words (candidates, top-k, DONE) under back-pressure,
// and that no command is taken while the global table is busy.
module tb_stream_if;
  import meloppr_pkg::*;
  localparam int P = 2, NODES = 8, EDGES = 16, LID_W = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, in_valid, in_ready, out_valid, out_ready;
  host_word_t         in_word;
  out_word_t          out_word;
  logic [ALPHA_W-1:0] alpha_p;
  logic [DEPTH_W-1:0] depth;
  logic               final_stage, emit_res;
  logic [3:0]         n_nodes [P];
  logic [P-1:0]       nw_en, ew_en, seed_en;
  logic [2:0]         nw_addr, seed_addr;
  logic [3:0]         nw_first, nw_last, ew_addr;
  logic [GID_W-1:0]   nw_gid;
  logic [LID_W-1:0]   ew_data;
  logic [SCORE_W-1:0] seed_val;
  logic               run, run_done, gst_clear, gst_topk, gst_topk_done, gst_busy;
  logic               res_valid, res_ready, tk_valid, tk_ready;
  logic [GID_W-1:0]   res_gid, tk_gid;
  logic [SCORE_W-1:0] res_score, tk_score;
  logic [31:0]        n_loaded;

  stream_if #(.P(P), .NODES(NODES), .EDGES(EDGES), .LID_W(LID_W)) dut (.*);

  // record every loader write and pulse
  typedef struct { int kind; int pe; int addr; int x; int y; int unsigned z; } ev_t;
  ev_t evs [$];
  int n_run = 0, n_clear = 0, n_topk = 0;
  always @(posedge clk) begin
    for (int p = 0; p < P; p++) begin
      if (nw_en[p])   evs.push_back('{0, p, nw_addr, nw_first, nw_last, nw_gid});
      if (ew_en[p])   evs.push_back('{1, p, ew_addr, ew_data, 0, 0});
      if (seed_en[p]) evs.push_back('{2, p, seed_addr, 0, 0, seed_val});
    end
    if (run) n_run++;
    if (gst_clear) n_clear++;
    if (gst_topk) n_topk++;
  end
  out_word_t rx [$];
  always @(posedge clk) if (out_valid && out_ready) rx.push_back(out_word);
  always @(posedge clk) #2 out_ready = $urandom % 3 != 0;   // stable around the negedge

  task automatic send(op_e op, int unsigned a, int unsigned b);
    in_word = '{op: op, a: a, b: b}; in_valid = 1'b1;
    while (!in_ready) @(negedge clk);
    @(negedge clk); in_valid = 1'b0;
  endtask

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    ev_t exp [$];
    int fill [P];
    int degs [5] = '{2, 3, 1, 2, 2};
    rst_n = 0; out_ready = 0; in_valid = 0; in_word = '0; run_done = 0; gst_topk_done = 0; gst_busy = 0;
    res_valid = 0; res_gid = 0; res_score = 0; tk_valid = 0; tk_gid = 0; tk_score = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    send(OP_CFG, (1 << 21) | (3 << 16) | 870, 0);
    chk(alpha_p == 870 && depth == 3 && !final_stage && emit_res, "CFG fields");
    foreach (fill[p]) fill[p] = 0;
    for (int v = 0; v < 5; v++) begin
      int pe;
      pe = v % P;
      exp.push_back('{0, pe, v / P, fill[pe], fill[pe] + degs[v] - 1, 500 + v});
      send(OP_NODE, 500 + v, degs[v]);
      for (int j = 0; j < degs[v]; j++) begin
        exp.push_back('{1, pe, fill[pe], (v + j + 1) % 5, 0, 0});
        send(OP_NBR, (v + j + 1) % 5, 0);
        fill[pe]++;
      end
    end
    exp.push_back('{2, 1, 1, 0, 0, 12345});
    send(OP_SEED, 3, 12345);
    chk(evs.size() == exp.size(), $sformatf("%0d loader writes, expected %0d", evs.size(), exp.size()));
    foreach (exp[i]) if (i < evs.size())
      chk(evs[i] == exp[i], $sformatf("loader write %0d: kind %0d pe %0d addr %0d %0d %0d %0d", i,
          evs[i].kind, evs[i].pe, evs[i].addr, evs[i].x, evs[i].y, evs[i].z));
    chk(n_nodes[0] == 3 && n_nodes[1] == 2 && n_loaded == 5, "node counts");

    // RUN with two candidates
    send(OP_RUN, 0, 0);
    chk(n_run == 1, "run pulse");
    chk(!in_ready, "busy during RUN");
    for (int i = 0; i < 2; i++) begin
      res_valid = 1; res_gid = 700 + i; res_score = 40 + i;
      while (!res_ready) @(negedge clk);
      @(negedge clk); res_valid = 0;
    end
    // the global table is still folding in the last score: DONE must wait
    gst_busy = 1;
    run_done = 1; @(negedge clk); run_done = 0;
    repeat (5) @(negedge clk);
    chk(rx.size() == 2 && !out_valid, "DONE sent while the global table is busy");
    gst_busy = 0; #1;
    while (!in_ready) @(negedge clk);
    chk(rx.size() == 3 && rx[0] == '{TAG_RES, 700, 40} && rx[1] == '{TAG_RES, 701, 41} &&
        rx[2].tag == TAG_DONE && rx[2].a == 32'(OP_RUN), "RUN output words");
    rx = {};

    // the global table still busy: commands must wait
    gst_busy = 1;
    in_word = '{op: OP_CLEAR, a: 0, b: 0}; in_valid = 1;
    repeat (4) @(negedge clk);
    chk(n_clear == 0, "command taken while global table busy");
    gst_busy = 0; #1;
    while (!in_ready) @(negedge clk);
    @(negedge clk); in_valid = 0;
    while (!in_ready) @(negedge clk);
    chk(n_clear == 1 && rx.size() == 1 && rx[0].tag == TAG_DONE && rx[0].a == 32'(OP_CLEAR), "CLEAR");
    rx = {};

    // TOPK with three results
    send(OP_TOPK, 0, 0);
    chk(n_topk == 1, "topk pulse");
    for (int i = 0; i < 3; i++) begin
      tk_valid = 1; tk_gid = 900 + i; tk_score = 90 - i;
      while (!tk_ready) @(negedge clk);
      @(negedge clk); tk_valid = 0;
    end
    gst_topk_done = 1; @(negedge clk); gst_topk_done = 0;
    while (!in_ready) @(negedge clk);
    chk(rx.size() == 4 && rx[0] == '{TAG_TOPK, 900, 90} && rx[2] == '{TAG_TOPK, 902, 88} &&
        rx[3].tag == TAG_DONE && rx[3].a == 32'(OP_TOPK), "TOPK output words");

    // a new CFG restarts the sub-graph
    send(OP_CFG, (1 << 20) | (2 << 16) | 512, 0);
    chk(alpha_p == 512 && depth == 2 && final_stage && !emit_res && n_loaded == 0 &&
        n_nodes[0] == 0 && n_nodes[1] == 0, "second CFG");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
