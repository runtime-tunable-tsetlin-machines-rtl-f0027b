// tb_tm_output_fifo - testbench of the output FIFO.
//
// Random pushes (only while not full, as the accelerator does) and random
// pops against a queue model: data order, count, full at 32 entries,
// valid when not empty, simultaneous push and pop, and clear.
module tb_tm_output_fifo;
  localparam int DEPTH = 32, W = 8;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, full, m_valid, m_ready = 0;
  logic [W-1:0] push_data = '0, m_data;
  logic [5:0] count;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, n_full = 0;

  always #5 clk = ~clk;
  tm_output_fifo #(.DEPTH(DEPTH), .W(W)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(int'(count) == q.size(), "count");
      check(full == (q.size() == DEPTH), "full");
      check(m_valid == (q.size() > 0), "valid");
      if (m_valid) check(m_data == q[0], "data");
      if (full) n_full++;
      push = !full && ($urandom % 100 < ((i / 400) % 2 ? 30 : 70));
      push_data = 8'($urandom);
      m_ready = ($urandom % 100 < ((i / 400) % 2 ? 70 : 30));
      @(posedge clk);
      if (m_valid && m_ready) void'(q.pop_front());
      if (push) q.push_back(push_data);
      if (i == 1500) begin
        @(negedge clk) clear = 1; push = 0; m_ready = 0;
        @(negedge clk) clear = 0;
        q.delete();
      end
    end
    check(n_full > 0, "full reached");
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
