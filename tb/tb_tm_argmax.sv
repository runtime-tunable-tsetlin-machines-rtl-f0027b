// tb_tm_argmax - testbench of the argmax.
//
// Three inputs present random classes (each class once per run, in random
// order and several in the same clock) with small random sums so that ties
// are frequent.  For every datapoint the result must be the class with the
// largest sum, the lowest such class on a tie, whatever the arrival order.
module tb_tm_argmax;
  localparam int NIN = 3, BATCH = 32, SUM_W = 16, NCLS = 12;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid [NIN];
  logic [7:0] in_idx [NIN];
  logic signed [SUM_W-1:0] in_sums [NIN][BATCH];
  logic have;
  logic [7:0] best_idx [BATCH];
  logic signed [SUM_W-1:0] best_sum [BATCH];
  int sums [NCLS][BATCH];
  int checks = 0, failures = 0, n_tie = 0;

  always #5 clk = ~clk;
  tm_argmax #(.NIN(NIN), .BATCH(BATCH), .SUM_W(SUM_W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run();
    int order[$];
    for (int m = 0; m < NCLS; m++) begin
      order.push_back(m);
      for (int b = 0; b < BATCH; b++) sums[m][b] = int'($urandom % 7) - 3;
    end
    order.shuffle();
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    #1 check(!have, "cleared");
    while (order.size() > 0) begin
      for (int i = 0; i < NIN; i++) begin
        in_valid[i] = (order.size() > 0) && ($urandom % 2 == 0);
        if (in_valid[i]) begin
          int m = order.pop_front();
          in_idx[i] = 8'(m);
          for (int b = 0; b < BATCH; b++) in_sums[i][b] = SUM_W'(sums[m][b]);
        end
      end
      @(negedge clk);
      for (int i = 0; i < NIN; i++) in_valid[i] = 0;
    end
    @(negedge clk);
    check(have, "have result");
    for (int b = 0; b < BATCH; b++) begin
      int bi = 0;
      for (int m = 1; m < NCLS; m++) if (sums[m][b] > sums[bi][b]) bi = m;
      for (int m = bi + 1; m < NCLS; m++) if (sums[m][b] == sums[bi][b]) begin n_tie++; break; end
      check(int'(best_idx[b]) == bi, $sformatf("lane %0d class %0d exp %0d", b, best_idx[b], bi));
      check(int'(best_sum[b]) == sums[bi][b], "best sum");
    end
  endtask

  initial begin
    for (int i = 0; i < NIN; i++) begin
      in_valid[i] = 0; in_idx[i] = '0;
      for (int b = 0; b < BATCH; b++) in_sums[i][b] = '0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (10) run();
    check(n_tie > 0, "ties exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
