// tb_tm_clause_acc - testbench of the clause accumulator.
//
// Feeds a random stream of literals grouped into clauses and classes, with
// the next instruction's flags presented one stage behind as in the core,
// and random idle clocks between programs.  A reference computes each
// clause output as the AND of its literals; the block must emit exactly one
// result per clause, one clock after its last literal, with the clause's
// polarity, the class-end and final flags, and count the clauses.
module tb_tm_clause_acc;
  localparam int BATCH = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic s3_valid = 0, s3_pol = 0, s3_new_clause = 0, s3_last = 0;
  logic [BATCH-1:0] s3_literal = '0;
  logic next_valid = 0, next_new_clause = 0, next_new_class = 0;
  logic cl_valid, cl_pol, cl_class_end, cl_final;
  logic [BATCH-1:0] cl_out;
  logic [15:0] clause_count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tm_clause_acc #(.BATCH(BATCH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(int n);
    logic [BATCH-1:0] lit [$];
    bit nc[$], ncl[$], pol[$];
    logic [BATCH-1:0] acc;
    bit cur_pol;
    int n_cl = 0;
    for (int i = 0; i < n; i++) begin
      bit c  = (i == 0) || ($urandom % 3 == 0);
      bit cs = (i == 0) || (c && $urandom % 3 == 0);
      lit.push_back($urandom | $urandom);   // mostly ones
      nc.push_back(c);
      ncl.push_back(cs);
      pol.push_back(c ? 1'($urandom) : pol[i-1]);
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int i = 0; i < n; i++) begin
      s3_valid = 1; s3_literal = lit[i]; s3_pol = pol[i];
      s3_new_clause = nc[i]; s3_last = (i == n-1);
      next_valid = (i < n-1);
      next_new_clause = (i < n-1) ? nc[i+1] : 0;
      next_new_class  = (i < n-1) ? ncl[i+1] : 0;
      acc = nc[i] ? lit[i] : (acc & lit[i]);
      @(posedge clk); #1;
      if (i == n-1 || nc[i+1]) begin
        n_cl++;
        check(cl_valid, $sformatf("clause result after word %0d", i));
        check(cl_out == acc, $sformatf("clause output after word %0d", i));
        check(cl_pol == pol[i], "polarity");
        check(cl_class_end == (i == n-1 || ncl[i+1]), "class end");
        check(cl_final == (i == n-1), "final");
      end else check(!cl_valid, $sformatf("no result after word %0d", i));
      @(negedge clk);
    end
    s3_valid = 0; next_valid = 0; s3_last = 0;
    check(clause_count == 16'(n_cl), $sformatf("clause count %0d exp %0d", clause_count, n_cl));
    repeat ($urandom % 3) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(40); run(1); run(100);
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
