// replacement_controller_tb: random accesses to a few sets, checked against
// a recency list kept per set (most recent first): the victim must always be
// the last way in the list. A second instance in random mode must return
// every way at some point.
module replacement_controller_tb;
  logic clk = 0, rst = 1; always #5 clk = ~clk;
  localparam int W = 4, IB = 3;
  logic acc; logic [IB-1:0] aidx, qidx; logic [1:0] away, victim, rvictim;
  int order [1<<IB][W];
  int checks = 0, failures = 0;
  bit seen [W];

  replacement_controller #(.NUMBER_OF_WAYS(W), .INDEX_BITS(IB), .REPLACEMENT_MODE(0)) dut (
    .clk, .rst, .access(acc), .access_index(aidx), .access_way(away), .query_index(qidx),
    .victim_way(victim));
  replacement_controller #(.NUMBER_OF_WAYS(W), .INDEX_BITS(IB), .REPLACEMENT_MODE(1)) dutr (
    .clk, .rst, .access(acc), .access_index(aidx), .access_way(away), .query_index(qidx),
    .victim_way(rvictim));

  initial begin
    acc = 0; aidx = 0; away = 0; qidx = 0;
    for (int s = 0; s < (1<<IB); s++) for (int k = 0; k < W; k++) order[s][k] = k;
    @(posedge clk); @(posedge clk); rst <= 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      qidx = IB'($urandom);
      #1;
      checks++;
      if (int'(victim) != order[qidx][W-1]) begin
        failures++; $display("FAIL set %0d victim %0d exp %0d", qidx, victim, order[qidx][W-1]);
      end
      seen[rvictim] = 1;
      acc = 1'($urandom); aidx = IB'($urandom); away = 2'($urandom);
      @(posedge clk);
      if (acc) begin
        automatic int p = 0;
        for (int k = 0; k < W; k++) if (order[aidx][k] == int'(away)) p = k;
        for (int k = p; k > 0; k--) order[aidx][k] = order[aidx][k-1];
        order[aidx][0] = away;
      end
    end
    for (int k = 0; k < W; k++) begin
      checks++; if (!seen[k]) begin failures++; $display("FAIL random mode never chose way %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
