// tb_tm_instr_mem - testbench of the instruction memory.
//
// Appends random instructions to a small memory (DEPTH 16), reads every
// address back through the one-clock synchronous read port, checks the
// count, that a write past the end is dropped and flags overflow, and that
// clear rewinds the write pointer so a second, shorter program overwrites
// the first from address 0.
module tb_tm_instr_mem;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0, clear = 0, wr_en = 0, overflow;
  logic [15:0] wr_data = '0, rd_data;
  logic [4:0] count;
  logic [3:0] rd_addr = '0;
  logic [15:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tm_instr_mem #(.DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_prog(int n);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int i = 0; i < n; i++) begin
      wr_en = 1; wr_data = 16'($urandom);
      if (i < DEPTH) ref_mem[i] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  task automatic read_all(int n);
    for (int i = 0; i < n; i++) begin
      rd_addr = 4'(i);
      @(negedge clk);
      check(rd_data == ref_mem[i], $sformatf("addr %0d: %h exp %h", i, rd_data, ref_mem[i]));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    write_prog(10);
    check(count == 10, "count after 10 writes");
    check(!overflow, "no overflow");
    read_all(10);
    write_prog(DEPTH + 2);
    check(count == DEPTH, "count saturates at depth");
    check(overflow, "overflow flagged");
    read_all(DEPTH);
    write_prog(3);
    check(count == 3, "count after clear and 3 writes");
    check(!overflow, "overflow cleared");
    read_all(3);
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
