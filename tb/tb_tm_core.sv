// tb_tm_core - self-checking testbench of one inference core.
//
// For several random Tsetlin Machines (different numbers of features,
// classes and clauses, so the same core is reprogrammed at run time) it
// writes the compiled Include instructions and a random batch of 32
// datapoints, pulses start, and checks every class sum the core emits
// against the reference model, the order of the class indices, and the
// latency: the last class sum must appear N+4 clock edges after start for a
// program of N instructions (one instruction per clock through the
// four-stage pipeline).  An empty program must report done at once.
module tb_tm_core;
  import tm_pkg::*;
  import tm_tb_pkg::*;

  localparam int BATCH = 32;
  localparam int SUM_W = 16;

  logic clk = 0, rst_n = 0;
  logic im_clear = 0, im_wr_en = 0, fm_clear = 0, fm_wr_en = 0, start = 0;
  logic [15:0] im_wr_data = '0;
  logic [BATCH-1:0] fm_wr_data = '0;
  logic busy, done, im_overflow, ev_valid, ev_final;
  logic [15:0] n_instr;
  logic [7:0] ev_idx;
  logic signed [SUM_W-1:0] ev_sums [BATCH];

  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  tm_core #(.BATCH(BATCH)) dut (
    .clk, .rst_n, .im_clear, .im_wr_en, .im_wr_data, .fm_clear, .fm_wr_en,
    .fm_wr_data, .start, .busy, .done, .n_instr, .im_overflow,
    .ev_valid, .ev_idx, .ev_sums, .ev_final
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_model(int nf, int nm, int ncl, int pct);
    tm_model mdl = new(nf, nm, ncl);
    logic [15:0] prog[$];
    bit x[BATCH][];
    logic [BATCH-1:0] fw;
    int n_ev = 0, t0, exp_idx = 0;
    bit seen_final = 0;
    mdl.randomize_model(pct);
    mdl.compile(0, nm, prog);
    foreach (x[b]) begin
      x[b] = new[nf];
      foreach (x[b][f]) x[b][f] = $urandom % 2;
    end
    @(negedge clk) im_clear = 1; fm_clear = 1;
    @(negedge clk) im_clear = 0; fm_clear = 0;
    foreach (prog[i]) begin
      im_wr_en = 1; im_wr_data = prog[i];
      @(negedge clk);
    end
    im_wr_en = 0;
    for (int f = 0; f < nf; f++) begin
      for (int b = 0; b < BATCH; b++) fw[b] = x[b][f];
      fm_wr_en = 1; fm_wr_data = fw;
      @(negedge clk);
    end
    fm_wr_en = 0;
    check(n_instr == 16'(prog.size()), "program length");
    start = 1; t0 = cycle;
    @(negedge clk) start = 0;
    while (!seen_final) begin
      @(posedge clk); #1;
      if (ev_valid) begin
        check(int'(ev_idx) == exp_idx, $sformatf("class index %0d exp %0d", ev_idx, exp_idx));
        for (int b = 0; b < BATCH; b++)
          check(int'(ev_sums[b]) == mdl.class_sum(exp_idx, x[b]),
                $sformatf("sum class %0d lane %0d: %0d exp %0d", exp_idx, b,
                          ev_sums[b], mdl.class_sum(exp_idx, x[b])));
        exp_idx++;
        if (ev_final) begin
          seen_final = 1;
          check(done, "done with final class");
          check(cycle - t0 == prog.size() + 4,
                $sformatf("latency %0d for %0d instructions", cycle - t0, prog.size()));
        end
      end
    end
    check(exp_idx == nm, "number of classes");
    @(posedge clk); #1 check(!busy, "idle after done");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_model(16, 3, 8, 80);
    run_model(40, 5, 12, 40);
    run_model(7, 2, 4, 200);
    run_model(100, 10, 20, 15);
    // empty program
    @(negedge clk) im_clear = 1;
    @(negedge clk) im_clear = 0; start = 1;
    @(negedge clk) start = 0;
    check(done, "empty program done in one clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
