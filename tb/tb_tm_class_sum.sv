// tb_tm_class_sum - testbench of the class-sum stage.
//
// Sends random finished clauses (random outputs for 32 datapoints, random
// polarity, random class ends) and checks every emitted class against a
// reference: sum of +1 for each firing positive clause and -1 for each
// firing negative clause per datapoint, the class index counting up from 0,
// the event one clock after the class's last clause, sums restarting at 0
// for the next class, and a start pulse resetting the class index.
module tb_tm_class_sum;
  localparam int BATCH = 32, SUM_W = 16;
  logic clk = 0, rst_n = 0, start = 0;
  logic cl_valid = 0, cl_pol = 0, cl_class_end = 0, cl_final = 0;
  logic [BATCH-1:0] cl_out = '0;
  logic ev_valid, ev_final;
  logic [7:0] ev_idx;
  logic signed [SUM_W-1:0] ev_sums [BATCH];
  int ref_sum [BATCH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tm_class_sum #(.BATCH(BATCH), .SUM_W(SUM_W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(int n_clauses);
    int cls = 0;
    foreach (ref_sum[b]) ref_sum[b] = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int i = 0; i < n_clauses; i++) begin
      cl_valid = 1; cl_out = $urandom; cl_pol = 1'($urandom);
      cl_class_end = (i == n_clauses-1) || ($urandom % 6 == 0);
      cl_final = (i == n_clauses-1);
      for (int b = 0; b < BATCH; b++)
        if (cl_out[b]) ref_sum[b] += cl_pol ? -1 : 1;
      @(posedge clk); #1;
      check(ev_valid == cl_class_end, $sformatf("event after clause %0d", i));
      if (cl_class_end) begin
        check(int'(ev_idx) == cls, "class index");
        check(ev_final == cl_final, "final flag");
        for (int b = 0; b < BATCH; b++)
          check(int'(ev_sums[b]) == ref_sum[b],
                $sformatf("class %0d lane %0d sum %0d exp %0d", cls, b, ev_sums[b], ref_sum[b]));
        foreach (ref_sum[b]) ref_sum[b] = 0;
        cls++;
      end
      @(negedge clk);
      cl_valid = 0;
      if ($urandom % 2 == 0) @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(60); run(200);
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
