// tb_acc_score_table: loads global ids (which must clear pi^a), applies
// random read-modify-write accumulations through the accumulator port and
// re-initialisations, and compares both read ports with a model.
module tb_acc_score_table;
  import meloppr_pkg::*;
  localparam int NODES = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               iw_en, a_wen;
  logic [3:0]         iw_addr, a_addr, d_addr;
  logic [GID_W-1:0]   iw_gid, d_gid;
  logic [SCORE_W-1:0] a_rdata, a_wdata, d_acc;
  logic [GID_W-1:0]   m_gid [NODES];
  logic [SCORE_W-1:0] m_acc [NODES];

  acc_score_table #(.NODES(NODES)) dut (.*);

  task automatic check_all();
    for (int i = 0; i < NODES; i++) begin
      d_addr = 4'(i); a_addr = 4'(i); #1;
      checks++;
      if (d_gid !== m_gid[i] || d_acc !== m_acc[i] || a_rdata !== m_acc[i]) begin
        failures++;
        $display("FAIL entry %0d: gid %0d acc %0d/%0d expected %0d %0d", i, d_gid, d_acc, a_rdata, m_gid[i], m_acc[i]);
      end
    end
    @(negedge clk);   // back in step with the clock
  endtask

  initial begin
    iw_en = 0; a_wen = 0; iw_addr = 0; a_addr = 0; d_addr = 0; iw_gid = 0; a_wdata = 0;
    for (int i = 0; i < NODES; i++) begin
      @(negedge clk); iw_en = 1; iw_addr = 4'(i); iw_gid = $urandom; m_gid[i] = iw_gid; m_acc[i] = 0;
    end
    @(negedge clk); iw_en = 0;
    check_all();
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      a_addr = 4'($urandom); a_wen = 1; #1;
      a_wdata = a_rdata + ($urandom % 1000);
      m_acc[a_addr] = a_wdata;
      if ($urandom % 10 == 0) begin   // re-init wins over the accumulator
        a_wen = 0; iw_en = 1; iw_addr = a_addr; iw_gid = $urandom;
        m_gid[a_addr] = iw_gid; m_acc[a_addr] = 0;
      end
      @(negedge clk); a_wen = 0; iw_en = 0;
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
