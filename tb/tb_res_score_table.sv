// tb_res_score_table: checks the two-bank residual table: init clears both
// banks, a seed lands in the next bank, updates add into the next bank,
// the accumulator port reads next and clears cur, and swap exchanges the
// banks so the diffuser and drain ports see the new residuals.
module tb_res_score_table;
  import meloppr_pkg::*;
  localparam int NODES = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, init_en, seed_en, upd_en, x_clr, swap;
  logic [3:0]         init_addr, seed_addr, upd_addr, r_addr, x_addr, d_addr;
  logic [SCORE_W-1:0] seed_val, upd_val, r_data, x_data, d_data;
  logic [SCORE_W-1:0] m_cur [NODES], m_next [NODES];

  res_score_table #(.NODES(NODES)) dut (.*);

  task automatic check_all(string tag);
    for (int i = 0; i < NODES; i++) begin
      r_addr = 4'(i); x_addr = 4'(i); d_addr = 4'(i); #1;
      checks++;
      if (r_data !== m_cur[i] || d_data !== m_cur[i] || x_data !== m_next[i]) begin
        failures++;
        $display("FAIL %s entry %0d: cur %0d/%0d next %0d expected %0d %0d", tag, i, r_data, d_data, x_data, m_cur[i], m_next[i]);
      end
    end
    @(negedge clk);   // back in step with the clock
  endtask

  initial begin
    rst_n = 0; init_en = 0; seed_en = 0; upd_en = 0; x_clr = 0; swap = 0;
    init_addr = 0; seed_addr = 0; upd_addr = 0; r_addr = 0; x_addr = 0; d_addr = 0;
    seed_val = 0; upd_val = 0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < NODES; i++) begin
      @(negedge clk); init_en = 1; init_addr = 4'(i); m_cur[i] = 0; m_next[i] = 0;
    end
    @(negedge clk); init_en = 0;
    check_all("init");
    for (int round = 0; round < 4; round++) begin
      // seed two entries, then random updates into next
      seed_en = 1; seed_addr = 4'(round); seed_val = 1000 + round; m_next[round] = seed_val;
      @(negedge clk); seed_en = 0;
      for (int n = 0; n < 40; n++) begin
        upd_en = 1; upd_addr = 4'($urandom); upd_val = $urandom % 500;
        m_next[upd_addr] += upd_val;
        @(negedge clk);
      end
      upd_en = 0;
      check_all("after updates");
      // accumulator sweep: read next, clear cur; then swap
      for (int i = 0; i < NODES; i++) begin
        x_addr = 4'(i); x_clr = 1; m_cur[i] = 0; @(negedge clk);
      end
      x_clr = 0; swap = 1; @(negedge clk); swap = 0;
      for (int i = 0; i < NODES; i++) begin
        logic [SCORE_W-1:0] t;
        t = m_cur[i]; m_cur[i] = m_next[i]; m_next[i] = t;
      end
      check_all("after swap");
    end
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
