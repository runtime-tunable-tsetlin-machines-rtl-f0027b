// tb_tm_fetch_decode - testbench of instruction fetch and decode.
//
// A model of the instruction memory (one-clock synchronous read) holds a
// random program with random clause and class boundaries.  After start the
// block must decode one instruction per clock, in order, with no gaps,
// flag new clauses (CC or E toggled, or first word) and new classes (E
// toggled, or first word) as the program encodes them, mark the last word,
// and decode the first word in the clock after the first fetch.
module tb_tm_fetch_decode;
  import tm_pkg::*;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW:0] n_instr = '0;
  logic [AW-1:0] imem_rd_addr;
  logic [15:0] imem_rd_data;
  logic dec_valid, dec_new_clause, dec_new_class, dec_last, fetching;
  instr_t dec_instr;
  logic [15:0] mem [256];
  bit exp_clause [256], exp_class [256];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) imem_rd_data <= mem[imem_rd_addr];

  tm_fetch_decode #(.AW(AW)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(int n);
    bit cc = 0, e = 0;
    int got = 0, t = 0;
    for (int i = 0; i < n; i++) begin
      bit nc = (i == 0) || ($urandom % 3 == 0);
      bit ncl = (i == 0) || (nc && $urandom % 3 == 0);
      if (nc) cc = !cc;
      if (ncl) e = !e;
      // a new class toggles E; CC may or may not toggle with it
      if (ncl && $urandom % 2 == 0) cc = !cc;
      mem[i] = {1'($urandom), cc, e, 12'($urandom), 1'($urandom)};
      exp_clause[i] = nc || ncl;
      exp_class[i]  = ncl;
    end
    n_instr = (AW+1)'(n);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (got < n && t < n + 10) begin
      @(posedge clk); #1; t++;
      if (dec_valid) begin
        if (got == 0) check(t == 1, $sformatf("first decode %0d clocks after start", t));
        check(dec_instr == instr_t'(mem[got]), $sformatf("word %0d", got));
        check(dec_new_clause == exp_clause[got], $sformatf("new clause %0d", got));
        check(dec_new_class == exp_class[got], $sformatf("new class %0d", got));
        check(dec_last == (got == n-1), $sformatf("last %0d", got));
        got++;
      end else if (got > 0 && got < n) check(0, "gap in decode");
    end
    check(got == n, "all words decoded");
    @(posedge clk); #1 check(!dec_valid && !fetching, "stops after last");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(50);
    run(1);
    run(200);
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
