// tb_tm_accelerator_full - the accelerator at its default parameters (one
// core, 32-datapoint batches, 24576-instruction memory, 4096-feature
// memory) running one MNIST-sized model end to end.
//
// The model is random but has the shape the paper uses for MNIST: 784
// Boolean features (1568 literals), 10 classes, 200 clauses per class,
// 3,136,000 TAs of which about 0.54 % are Includes, i.e. about 17,000
// instructions.  The host streams the instruction header and program, then
// a feature header and 784 feature packets for a batch of 32 random
// datapoints, reads the 32 classifications and compares them with the
// reference model.  It checks that the first result appears
// (program length + 7) clocks after the last feature packet, which is one
// instruction per clock through the pipeline.
module tb_tm_accelerator_full;
  import tm_tb_pkg::*;

  localparam int BATCH = 32, SW = 32;
  localparam int N_FEAT = 784, N_CLASS = 10, N_CLAUSE = 200;

  logic clk = 0, rst_n = 0;
  logic [SW-1:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0, busy, imem_overflow;
  logic [7:0] m_tdata;
  int checks = 0, failures = 0, cycle = 0;
  int last_feat_cycle = 0, first_out_cycle = 0;
  bit want_first = 0;

  always #5 clk = ~clk;

  tm_accelerator dut (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tready, .m_tdata, .m_tvalid,
    .m_tready, .busy, .imem_overflow
  );

  always @(posedge clk) begin
    cycle++;
    if (m_tvalid && want_first) begin
      first_out_cycle = cycle;
      want_first = 0;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic send(logic [SW-1:0] w);
    s_tdata = w; s_tvalid = 1;
    do @(posedge clk); while (!s_tready);
    #1 s_tvalid = 0;
    @(negedge clk);
  endtask

  initial begin
    tm_model mdl = new(N_FEAT, N_CLASS, N_CLAUSE);
    tm_batch x = new(BATCH, N_FEAT);
    logic [15:0] prog[$];
    int got = 0;
    int exp_cls [BATCH];
    mdl.randomize_model(5);          // 0.5 % Includes
    mdl.compile(0, N_CLASS, prog);
    $display("program: %0d instructions", prog.size());
    foreach (exp_cls[b]) exp_cls[b] = mdl.predict(x.x[b]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    send({1'b1, 1'b1, 8'(N_CLASS), 22'(prog.size())});
    foreach (prog[i]) send({16'h0, prog[i]});
    send({1'b0, 1'b0, 30'(N_FEAT)});
    for (int f = 0; f < N_FEAT; f++) begin
      if (f == N_FEAT - 1) want_first = 1;
      send(x.word(f)[SW-1:0]);
      if (f == N_FEAT - 1) last_feat_cycle = cycle;
    end
    m_tready = 1;
    while (got < BATCH) begin
      @(negedge clk); #1;
      if (m_tvalid) begin
        check(int'(m_tdata) == exp_cls[got],
              $sformatf("datapoint %0d class %0d exp %0d", got, m_tdata, exp_cls[got]));
        got++;
      end
    end
    check(!imem_overflow, "program fits");
    check(first_out_cycle - last_feat_cycle == prog.size() + 7,
          $sformatf("latency %0d for %0d instructions", first_out_cycle - last_feat_cycle, prog.size()));
    $display("batch latency %0d clocks", first_out_cycle - last_feat_cycle + BATCH);
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
