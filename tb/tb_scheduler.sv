// tb_scheduler: four requesters that, like diffusers, hold a request until
// it is granted and then pick a new random destination. Every cycle the
// testbench's own round-robin model predicts which requester each bank
// grants; it checks the grants, the update port of each bank (address =
// id div P, value), the conflict-stall counter and all_idle.
module tb_scheduler;
  import meloppr_pkg::*;
  localparam int P = 4, LID_W = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic               rst_n, all_idle;
  logic [P-1:0]       req_valid, req_grant, diff_busy, upd_en;
  logic [LID_W-1:0]   req_dest  [P];
  logic [SCORE_W-1:0] req_value [P];
  logic [3:0]         upd_addr  [P];
  logic [SCORE_W-1:0] upd_val   [P];
  logic [31:0]        stall_ctr;

  scheduler #(.P(P), .LID_W(LID_W)) dut (.*);

  int rr [P];
  longint unsigned stalls = 0;
  int conflicts = 0;

  initial begin
    rst_n = 0; req_valid = '0; diff_busy = '0;
    foreach (req_dest[i]) begin req_dest[i] = '0; req_value[i] = '0; end
    foreach (rr[b]) rr[b] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 400; cyc++) begin
      logic [P-1:0] exp_g;
      // new requests for idle requesters
      for (int i = 0; i < P; i++)
        if (!req_valid[i] && ($urandom % 4 != 0)) begin
          req_valid[i] = 1'b1;
          // skew towards bank 0 to make conflicts frequent
          req_dest[i]  = LID_W'(($urandom % 2) ? (($urandom % 16) * P) : $urandom);
          req_value[i] = $urandom;
        end
      diff_busy = 4'($urandom);
      #1;
      exp_g = '0;
      for (int b = 0; b < P; b++) begin
        int w, cnt;
        w = -1; cnt = 0;
        for (int k = 0; k < P; k++) begin
          int i;
          i = (rr[b] + k) % P;
          if (req_valid[i] && (int'(req_dest[i]) % P) == b) begin
            cnt++;
            if (w < 0) w = i;
          end
        end
        if (cnt > 1) conflicts++;
        checks++;
        if (w < 0) begin
          if (upd_en[b]) begin failures++; $display("FAIL bank %0d update without request", b); end
        end else begin
          exp_g[w] = 1'b1;
          if (!upd_en[b] || upd_addr[b] != 4'(req_dest[w] / P) || upd_val[b] != req_value[w]) begin
            failures++; $display("FAIL cycle %0d bank %0d: en %0d addr %0d val %0d, expected requester %0d", cyc, b, upd_en[b], upd_addr[b], upd_val[b], w);
          end
          rr[b] = (w + 1) % P;
        end
      end
      checks++;
      if (req_grant != exp_g) begin failures++; $display("FAIL cycle %0d grants %b expected %b", cyc, req_grant, exp_g); end
      checks++;
      if (all_idle != (diff_busy == '0)) begin failures++; $display("FAIL all_idle"); end
      stalls += $countones(req_valid & ~exp_g);
      @(negedge clk);
      req_valid = req_valid & ~exp_g;
    end
    checks++;
    if (stall_ctr != stalls || conflicts == 0) begin
      failures++; $display("FAIL stall counter %0d expected %0d (conflicts %0d)", stall_ctr, stalls, conflicts);
    end
    $display("conflicting cycles: %0d, stalls %0d", conflicts, stalls);
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
