// tb_tm_literal_select - testbench of literal select.
//
// Drives random decoded instructions (random offsets, L bits and clause
// starts) against a model feature memory with one-clock read.  Checks the
// feature address (offsets accumulate within a clause and restart from 0
// at a new clause), the selected literal one clock later (the feature word
// for L=0, its complement for L=1) and that polarity and boundary flags
// travel with it.
module tb_tm_literal_select;
  import tm_pkg::*;
  localparam int BATCH = 32, FAW = 12;
  logic clk = 0, rst_n = 0;
  logic dec_valid = 0, dec_new_clause = 0, dec_new_class = 0, dec_last = 0;
  instr_t dec_instr = '0;
  logic [FAW-1:0] fmem_rd_addr;
  logic [BATCH-1:0] fmem_rd_data, s3_literal;
  logic s3_valid, s3_pol, s3_new_clause, s3_new_class, s3_last;
  logic [BATCH-1:0] fmem [4096];
  int checks = 0, failures = 0;
  int ptr = 0;
  logic [BATCH-1:0] exp_lit;
  bit exp_pol, exp_nc, exp_ncl, exp_last, pend = 0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) fmem_rd_data <= fmem[fmem_rd_addr];

  tm_literal_select #(.BATCH(BATCH), .FAW(FAW)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    foreach (fmem[i]) fmem[i] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      if (pend) begin
        check(s3_valid, "s3 valid");
        check(s3_literal == exp_lit, $sformatf("literal %0d", i));
        check({s3_pol, s3_new_clause, s3_new_class, s3_last} ==
              {exp_pol, exp_nc, exp_ncl, exp_last}, "flags");
      end else check(!s3_valid, "s3 idle");
      dec_valid = ($urandom % 4 != 0);
      dec_new_clause = (i == 0) || ($urandom % 4 == 0);
      dec_new_class = dec_new_clause && ($urandom % 3 == 0);
      dec_last = ($urandom % 10 == 0);
      dec_instr = {1'($urandom), 1'($urandom), 1'($urandom), 12'($urandom % 40), 1'($urandom)};
      #1;
      if (dec_valid) begin
        int a;
        a = (dec_new_clause ? 0 : ptr) + int'(dec_instr.offset);
        check(int'(fmem_rd_addr) == a, $sformatf("address %0d exp %0d", fmem_rd_addr, a));
        ptr = a % 4096;
        exp_lit = dec_instr.lit ? ~fmem[ptr] : fmem[ptr];
        {exp_pol, exp_nc, exp_ncl, exp_last} =
          {dec_instr.pol, dec_new_clause, dec_new_class, dec_last};
      end
      pend = dec_valid;
    end
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
