// tb_meloppr_full: the accelerator at its default size (16 PEs, 2048 nodes
// and 8192 neighbour entries per PE, 2000-entry global table, top 200),
// answering queries on a random graph of the size of the citeseer graph
// (3327 nodes, 4676 edges) with l1 = l2 = 3 and 8 next-stage nodes.
module tb_meloppr_full;
  import meloppr_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n, in_valid, in_ready, out_valid, out_ready, busy;
  host_word_t  in_word;
  out_word_t   out_word;
  logic [31:0] stall_ctr, n_iter, n_res_sent, gst_match, gst_insert, gst_evict, gst_drop;
  logic [31:0] n_loaded, n_reads, n_writes, n_skips;
  logic [$clog2(DEF_C * DEF_K + 1)-1:0] gst_used;

  always #5 clk = ~clk;

  meloppr_top dut (.*);

  tb_host #(.P(DEF_P), .NODES_PE(DEF_NODES_PE), .GST_SIZE(DEF_C * DEF_K), .TOP_K(DEF_K),
            .NG(3327), .NE(4676), .NQ(1), .NS(8), .EXPECT_EVICT(1'b0), .SEED(3),
            .MAX_CYCLES(20_000_000)) host (.*);

endmodule
