// tb_meloppr_top: end-to-end test of the accelerator at reduced size
// (4 PEs, 64 nodes and 256 neighbour entries per PE, a 16-entry global
// table returning the top 8) so that the global table overflows and evicts.
// The host model and all checks are in tb_host.
module tb_meloppr_top;
  import meloppr_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n, in_valid, in_ready, out_valid, out_ready, busy;
  host_word_t  in_word;
  out_word_t   out_word;
  logic [31:0] stall_ctr, n_iter, n_res_sent, gst_match, gst_insert, gst_evict, gst_drop;
  logic [31:0] n_loaded, n_reads, n_writes, n_skips;
  logic [$clog2(16 + 1)-1:0] gst_used;     // GST_SIZE = 16

  always #5 clk = ~clk;

  meloppr_top #(.P(4), .NODES_PE(64), .EDGES_PE(256), .GST_SIZE(16), .TOP_K(8)) dut (.*);

  tb_host #(.P(4), .NODES_PE(64), .GST_SIZE(16), .TOP_K(8), .NG(80), .NE(160),
            .NQ(3), .NS(3), .EXPECT_EVICT(1'b1), .SEED(7)) host (.*);

endmodule
