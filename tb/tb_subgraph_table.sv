// tb_subgraph_table: writes random node records and neighbour entries, then
// reads every one back through the diffuser ports and compares with a copy
// kept by the testbench. Reads are asynchronous, so data is checked in the
// cycle its address is applied.
module tb_subgraph_table;
  localparam int NODES = 32, EDGES = 128, LID_W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic             nw_en, ew_en;
  logic [4:0]       nw_addr, nr_addr;
  logic [6:0]       nw_first, nw_last, ew_addr, er_addr, nr_first, nr_last;
  logic [LID_W-1:0] ew_data, er_data;
  logic [6:0]       m_first [NODES], m_last [NODES];
  logic [LID_W-1:0] m_nbr [EDGES];

  subgraph_table #(.NODES(NODES), .EDGES(EDGES), .LID_W(LID_W)) dut (.*);

  initial begin
    nw_en = 0; ew_en = 0; nr_addr = 0; er_addr = 0;
    nw_addr = 0; nw_first = 0; nw_last = 0; ew_addr = 0; ew_data = 0;
    for (int i = 0; i < NODES; i++) begin
      @(negedge clk);
      nw_en = 1; nw_addr = 5'(i); nw_first = 7'($urandom); nw_last = 7'($urandom);
      m_first[i] = nw_first; m_last[i] = nw_last;
    end
    @(negedge clk); nw_en = 0;
    for (int i = 0; i < EDGES; i++) begin
      ew_en = 1; ew_addr = 7'(i); ew_data = LID_W'($urandom); m_nbr[i] = ew_data;
      @(negedge clk);
    end
    ew_en = 0;
    // a node write and an edge write in the same cycle
    nw_en = 1; ew_en = 1; nw_addr = 3; nw_first = 7'd11; nw_last = 7'd22;
    ew_addr = 7'd5; ew_data = 8'hA5; m_first[3] = 11; m_last[3] = 22; m_nbr[5] = 8'hA5;
    @(negedge clk); nw_en = 0; ew_en = 0;
    for (int i = 0; i < NODES; i++) begin
      nr_addr = 5'(i); #1;
      checks++;
      if (nr_first !== m_first[i] || nr_last !== m_last[i]) begin
        failures++; $display("FAIL node %0d: %0d/%0d expected %0d/%0d", i, nr_first, nr_last, m_first[i], m_last[i]);
      end
    end
    for (int i = 0; i < EDGES; i++) begin
      er_addr = 7'(i); #1;
      checks++;
      if (er_data !== m_nbr[i]) begin failures++; $display("FAIL nbr %0d", i); end
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
