// tb_tm_feature_mem - testbench of the feature memory.
//
// Writes a batch of random feature words, reads every address back one
// clock after presenting it, and checks that addresses beyond the number of
// features written in this batch read as zero, also after a clear and a
// shorter second batch.
module tb_tm_feature_mem;
  localparam int BATCH = 32, DEPTH = 64;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0;
  logic [BATCH-1:0] wr_data = '0, rd_data;
  logic [6:0] count;
  logic [5:0] rd_addr = '0;
  logic [BATCH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tm_feature_mem #(.BATCH(BATCH), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic batch(int n);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int i = 0; i < n; i++) begin
      wr_en = 1; wr_data = $urandom; ref_mem[i] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    check(count == 7'(n), "count");
    for (int i = 0; i < DEPTH; i++) begin
      rd_addr = 6'(i);
      @(negedge clk);
      check(rd_data == ((i < n) ? ref_mem[i] : '0),
            $sformatf("addr %0d: %h", i, rd_data));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    batch(40);
    batch(7);
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
