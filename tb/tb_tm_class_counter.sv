// tb_tm_class_counter - testbench of the class counter.
//
// Writes class counts for four cores in random order, checks each core's
// base and the global index of random local indices against a running
// prefix sum, the total, that clear forgets the counts, and that a write in
// the same clock as clear is kept.
module tb_tm_class_counter;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0, clear = 0, wr = 0;
  logic [1:0] wr_core = '0;
  logic [7:0] wr_count = '0;
  logic [7:0] local_idx [NC], global_idx [NC], base [NC];
  logic [8:0] total;
  int cnt [NC];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tm_class_counter #(.NUM_CORES(NC)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic verify();
    int acc = 0;
    for (int k = 0; k < NC; k++) local_idx[k] = 8'($urandom % 8);
    #1;
    for (int k = 0; k < NC; k++) begin
      check(int'(base[k]) == acc, $sformatf("base %0d", k));
      check(int'(global_idx[k]) == acc + int'(local_idx[k]), $sformatf("global %0d", k));
      acc += cnt[k];
    end
    check(int'(total) == acc, "total");
  endtask

  initial begin
    foreach (cnt[k]) cnt[k] = 0;
    foreach (local_idx[k]) local_idx[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      automatic int k = $urandom % NC;
      @(negedge clk);
      wr = 1; wr_core = 2'(k); wr_count = 8'($urandom % 12);
      clear = ($urandom % 8 == 0);
      if (clear) foreach (cnt[j]) cnt[j] = 0;
      cnt[k] = wr_count;
      @(negedge clk);
      wr = 0; clear = 0;
      verify();
    end
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    foreach (cnt[k]) cnt[k] = 0;
    verify();
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
