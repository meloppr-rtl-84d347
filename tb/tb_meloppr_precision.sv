// tb_meloppr_precision: precision against the number of next-stage nodes.
// The second stage of a query only runs from the next-stage nodes the host
// picks, in order of their residual, so fewer picks trade precision for
// time. This testbench runs one query on a random graph the size of citeseer
// (3327 nodes, 4676 edges) through three copies of the accelerator at its
// default size (P = 16, c*k = 2000, k = 200), side by side. The copies use
// 0, 8 and all next-stage nodes.
//
// Every copy's host model checks each returned word exactly. This testbench
// prints, per selection, the top-200 precision against a double-precision
// PPR of depth 6 on the whole graph, and the cycles the query took. It
// checks that precision does not fall as more next-stage nodes are used.
// The precision values themselves depend on the random graph and are not
// checked.
module tb_meloppr_precision;
  import meloppr_pkg::*;

  localparam int NSEL = 3;
  localparam int unsigned SEL [NSEL] = '{0, 8, 100_000};   // 100_000: all

  logic clk = 1'b0;
  always #5 clk = ~clk;

  bit              done     [NSEL];
  int              h_checks [NSEL];
  int              h_fails  [NSEL];
  int              h_hits   [NSEL];
  int              h_cands  [NSEL];
  longint unsigned h_cyc    [NSEL];

  for (genvar si = 0; si < NSEL; si++) begin : s
    logic        rst_n, in_valid, in_ready, out_valid, out_ready, busy;
    host_word_t  in_word;
    out_word_t   out_word;
    logic [31:0] stall_ctr, n_iter, n_res_sent, gst_match, gst_insert, gst_evict, gst_drop;
    logic [31:0] n_loaded, n_reads, n_writes, n_skips;
    logic [$clog2(DEF_C * DEF_K + 1)-1:0] gst_used;

    meloppr_top dut (.*);

    tb_host #(.P(DEF_P), .NODES_PE(DEF_NODES_PE), .GST_SIZE(DEF_C * DEF_K), .TOP_K(DEF_K),
              .NG(3327), .NE(4676), .NQ(1), .NS(SEL[si]), .EXPECT_EVICT(1'b0),
              .SEED(3), .MAX_CYCLES(20_000_000), .FINISH(1'b0)) host (.*);

    // cycles until this copy's query ended
    always @(posedge clk) if (!host.finished) h_cyc[si] <= host.cycles;

    assign done[si]     = host.finished;
    assign h_checks[si] = host.checks;
    assign h_fails[si]  = host.failures;
    assign h_hits[si]   = host.hits_total;
    assign h_cands[si]  = host.cands_total;
  end

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    bit all_done;
    all_done = 1'b0;
    while (!all_done) begin
      @(negedge clk);
      all_done = 1'b1;
      for (int si = 0; si < NSEL; si++) if (!done[si]) all_done = 1'b0;
    end
    for (int si = 0; si < NSEL; si++) begin
      $display("next-stage nodes %0s of %0d candidates: precision %0d/%0d = %.1f%%, %0d cycles",
               (SEL[si] >= 100_000) ? "all" : $sformatf("%0d", SEL[si]), h_cands[si],
               h_hits[si], DEF_K, 100.0 * real'(h_hits[si]) / real'(DEF_K), h_cyc[si]);
      checks   += h_checks[si];
      failures += h_fails[si];
      if (si > 0)
        check(h_hits[si] >= h_hits[si-1],
              $sformatf("precision fell from %0d to %0d with more next-stage nodes",
                        h_hits[si-1], h_hits[si]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // watchdog
  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
