// tb_meloppr_scaling: the parallelism study. The same three queries on the same
// citeseer-sized random graph (3327 nodes, 4676 edges) run on five copies
// of the accelerator with P = 1, 2, 4, 8 and 16 PEs, side by side. Every
// other parameter stays at its default, so the per-PE tables, and with them
// the total memory, grow with P, as in the study the design is modelled on.
//
// Each copy has its own host model, which checks every returned word exactly
// (stage-one candidates, top-k list, table counters). This testbench adds,
// per P:
//   diffusion cycles  cycles in which a diffuser or an accumulator is busy,
//                     i.e. the graph-diffusion latency without loading,
//                     draining and the global table;
//   ideal cycles      per propagation, the busiest PE's node reads plus
//                     writes plus one: the time with no write conflicts;
//   overhead          1 - (ideal propagation + accumulate) / diffusion
//                     cycles, the share of the latency lost to conflicts.
// It checks that the diffusion latency falls each time P doubles and that
// write conflicts occur whenever there is more than one PE. The speed-up
// from 1 to 16 PEs and the overheads are printed for comparison with the
// published study (over 10x; under 20% at P = 2, under 40% above).
module tb_meloppr_scaling;
  import meloppr_pkg::*;

  localparam int NP = 5;                 // P = 1, 2, 4, 8, 16

  logic clk = 1'b0;
  always #5 clk = ~clk;

  longint unsigned diff_cyc  [NP];
  longint unsigned ideal_cyc [NP];
  longint unsigned stalls    [NP];
  bit              done      [NP];
  int              h_checks  [NP];
  int              h_fails   [NP];

  for (genvar i = 0; i < NP; i++) begin : g
    localparam int unsigned PP = 1 << i;

    logic        rst_n, in_valid, in_ready, out_valid, out_ready, busy;
    host_word_t  in_word;
    out_word_t   out_word;
    logic [31:0] stall_ctr, n_iter, n_res_sent, gst_match, gst_insert, gst_evict, gst_drop;
    logic [31:0] n_loaded, n_reads, n_writes, n_skips;
    logic [$clog2(DEF_C * DEF_K + 1)-1:0] gst_used;

    meloppr_top #(.P(PP)) dut (.*);

    tb_host #(.P(PP), .NODES_PE(DEF_NODES_PE), .GST_SIZE(DEF_C * DEF_K), .TOP_K(DEF_K),
              .NG(3327), .NE(4676), .NQ(3), .NS(8), .EXPECT_EVICT(1'b0), .SEED(3),
              .MAX_CYCLES(20_000_000), .FINISH(1'b0)) host (.*);

    // latency bookkeeping
    logic prop_busy_q;
    initial begin
      diff_cyc[i]  = 0;
      ideal_cyc[i] = 0;
      prop_busy_q  = 1'b0;
    end
    always @(posedge clk) begin
      if ((|dut.diff_busy) || (|dut.acc_busy)) diff_cyc[i] += 1;
      // accumulate passes cost the same with or without conflicts
      if (|dut.acc_busy) ideal_cyc[i] += 1;
      // end of a propagation: add its conflict-free length
      if (prop_busy_q && !(|dut.diff_busy)) begin
        int unsigned worst;
        worst = 0;
        for (int p = 0; p < int'(PP); p++)
          if (dut.read_ctr[p] + dut.write_ctr[p] > worst) worst = dut.read_ctr[p] + dut.write_ctr[p];
        ideal_cyc[i] += worst + 1;
      end
      prop_busy_q <= |dut.diff_busy;
    end

    assign done[i]     = host.finished;
    assign h_checks[i] = host.checks;
    assign h_fails[i]  = host.failures;
    assign stalls[i]   = stall_ctr;
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
      for (int i = 0; i < NP; i++) if (!done[i]) all_done = 1'b0;
    end
    for (int i = 0; i < NP; i++) begin
      real ovh;
      ovh = (diff_cyc[i] == 0) ? 0.0 : 1.0 - real'(ideal_cyc[i]) / real'(diff_cyc[i]);
      $display("P=%2d: diffusion cycles %0d (%.3f ms at 100 MHz), conflict-free %0d, overhead %.1f%%, stalls %0d",
               1 << i, diff_cyc[i], real'(diff_cyc[i]) / 1.0e5, ideal_cyc[i], 100.0 * ovh, stalls[i]);
      checks   += h_checks[i];
      failures += h_fails[i];
      check(ideal_cyc[i] <= diff_cyc[i], $sformatf("P=%0d: conflict-free bound above measured", 1 << i));
      if (i > 0) begin
        check(diff_cyc[i] < diff_cyc[i-1],
              $sformatf("P=%0d: latency %0d not below P=%0d's %0d", 1 << i, diff_cyc[i], 1 << (i-1), diff_cyc[i-1]));
        check(stalls[i] > 0, $sformatf("P=%0d: no write conflict", 1 << i));
      end else begin
        check(stalls[i] == 0, "P=1: a single PE cannot conflict");
      end
    end
    $display("speed-up from P=1 to P=16: %.2fx", real'(diff_cyc[0]) / real'(diff_cyc[NP-1]));
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
