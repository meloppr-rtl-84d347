// tb_diffusion_ctrl: the controller with behavioural PEs. Accumulator and
// diffuser passes are modelled as busy periods of random length; drain data
// are random tables with many zeros. For several (alpha, depth, final,
// emit) settings it checks the number of propagations and accumulate
// passes, each pass's coefficient against Eq. (1) computed independently,
// that no pass starts before the previous one ended, and the drained
// streams (PE-major order, zero scores skipped, residual weighted by
// alpha^l) under random back-pressure.
module tb_diffusion_ctrl;
  import meloppr_pkg::*;
  localparam int P = 2, NODES = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, run, final_stage, emit_res, busy, done;
  logic [ALPHA_W-1:0] alpha_p;
  logic [DEPTH_W-1:0] depth;
  logic [3:0]         n_nodes [P];
  logic               diff_start, diff_idle, acc_start;
  logic [COEF_W-1:0]  acc_coef;
  logic [P-1:0]       acc_busy;
  logic [2:0]         d_addr;
  logic [GID_W-1:0]   d_gid [P];
  logic [SCORE_W-1:0] d_acc [P], d_res [P];
  logic               gst_valid, gst_ready, res_valid, res_ready;
  logic [GID_W-1:0]   gst_gid, res_gid;
  logic [SCORE_W-1:0] gst_score, res_score;
  logic [31:0]        n_iter, n_res_sent;

  diffusion_ctrl #(.P(P), .NODES(NODES)) dut (.*);

  int unsigned t_gid [P][NODES], t_acc [P][NODES], t_res [P][NODES];
  always_comb for (int p = 0; p < P; p++) begin
    d_gid[p] = t_gid[p][d_addr]; d_acc[p] = t_acc[p][d_addr]; d_res[p] = t_res[p][d_addr];
  end

  // behavioural PEs
  int acc_left = 0, diff_left = 0, n_acc = 0, n_diff = 0, overlap = 0;
  int unsigned coefs [$];
  always @(posedge clk) begin
    if (acc_start) begin
      if (acc_left > 0 || diff_left > 0) overlap++;
      acc_left <= 2 + $urandom % 5; n_acc++; coefs.push_back(acc_coef);
    end else if (acc_left > 0) acc_left <= acc_left - 1;
    if (diff_start) begin
      if (acc_left > 0 || diff_left > 0) overlap++;
      diff_left <= 2 + $urandom % 9; n_diff++;
    end else if (diff_left > 0) diff_left <= diff_left - 1;
  end
  assign acc_busy  = (acc_left > 0) ? {P{1'b1}} : '0;
  assign diff_idle = (diff_left == 0);

  out_word_t got_g [$], got_r [$];
  always @(posedge clk) begin
    if (gst_valid && gst_ready) got_g.push_back('{tag: TAG_TOPK, a: gst_gid, b: gst_score});
    if (res_valid && res_ready) got_r.push_back('{tag: TAG_RES, a: res_gid, b: res_score});
  end
  always @(negedge clk) begin gst_ready <= $urandom % 3 != 0; res_ready <= $urandom % 2 != 0; end

  task automatic run_case(int unsigned al, int dp, bit fin, bit emit);
    int unsigned a, c;
    out_word_t eg [$], er [$];
    for (int p = 0; p < P; p++) begin
      n_nodes[p] = 4'(3 + $urandom % 6);
      for (int i = 0; i < NODES; i++) begin
        t_gid[p][i] = $urandom; t_acc[p][i] = ($urandom % 2) ? $urandom : 0;
        t_res[p][i] = ($urandom % 2) ? $urandom : 0;
      end
    end
    alpha_p = ALPHA_W'(al); depth = DEPTH_W'(dp); final_stage = fin; emit_res = emit;
    coefs = {}; got_g = {}; got_r = {}; n_acc = 0; n_diff = 0; overlap = 0;
    @(negedge clk); run = 1; @(negedge clk); run = 0;
    while (!done) @(negedge clk);
    // expectations
    a = 1024;
    for (int k = 0; k <= dp; k++) begin
      c = (k < dp) ? (((1024 - al) * a) >> 10) : (fin ? a : 0);
      checks++;
      if (k >= coefs.size() || coefs[k] != c) begin
        failures++; $display("FAIL alpha %0d depth %0d: coefficient %0d is %0d, expected %0d", al, dp, k, (k < coefs.size()) ? coefs[k] : -1, c);
      end
      if (k < dp) a = (a * al) >> 10;
    end
    checks++;
    if (n_acc != dp + 1 || n_diff != dp || overlap != 0) begin
      failures++; $display("FAIL passes: acc %0d diff %0d overlap %0d", n_acc, n_diff, overlap);
    end
    for (int p = 0; p < P; p++)
      for (int i = 0; i < n_nodes[p]; i++) begin
        if (t_acc[p][i] != 0) eg.push_back('{tag: TAG_TOPK, a: t_gid[p][i], b: t_acc[p][i]});
        if (emit && t_res[p][i] != 0)
          er.push_back('{tag: TAG_RES, a: t_gid[p][i], b: int'((longint'(t_res[p][i]) * a) >> 10)});
      end
    checks++;
    if (got_g != eg) begin failures++; $display("FAIL global-table stream (%0d words, expected %0d)", got_g.size(), eg.size()); end
    checks++;
    if (got_r != er) begin failures++; $display("FAIL residual stream (%0d words, expected %0d)", got_r.size(), er.size()); end
  endtask

  initial begin
    rst_n = 0; run = 0; alpha_p = 0; depth = 0; final_stage = 0; emit_res = 0;
    foreach (n_nodes[p]) n_nodes[p] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run_case(870, 3, 1'b0, 1'b1);
    run_case(870, 3, 1'b1, 1'b0);
    run_case(512, 2, 1'b1, 1'b1);
    run_case(1000, 0, 1'b1, 1'b0);
    run_case(300, 6, 1'b0, 1'b1);
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
