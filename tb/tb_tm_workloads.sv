// tb_tm_workloads - the five-core accelerator running models shaped like
// the sensor workloads used to evaluate the design.
//
// For each workload a random model is built with the dataset's number of
// classes and features and with about as many Include instructions as the
// base design's measured batch latency implies at one instruction per
// clock (EMG ~1,490, Human Activity ~7,560, Gesture Phase ~8,570,
// Sensorless Drives ~16,610, Gas Sensor Drift ~6,020).  Class and feature
// counts are the public datasets' raw ones, one Boolean feature per raw
// feature, which is an approximation: the booleanization is not given.
// The model is split by classes over the five cores, one batch of 32
// datapoints is classified and checked against the reference model, and
// the latency from the last feature packet to the first result must be the
// longest core program plus 7 clocks.  The five-core batch latency is
// printed next to the single-core program length.
module tb_tm_workloads;
  import tm_tb_pkg::*;

  localparam int NC = 5, BATCH = 32, SW = 32;

  logic clk = 0, rst_n = 0;
  logic [SW-1:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0, busy, imem_overflow;
  logic [7:0] m_tdata;
  int checks = 0, failures = 0, cycle = 0;
  int last_feat_cycle = 0, first_out_cycle = 0;
  bit want_first = 0;

  always #5 clk = ~clk;

  tm_accelerator #(.NUM_CORES(NC)) dut (
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

  task automatic workload(string name, int nf, int ncls, int ncl, int target);
    tm_model mdl = new(nf, ncls, ncl);
    tm_batch x = new(BATCH, nf);
    logic [15:0] prog[$];
    int exp_cls [BATCH];
    int lo = 0, longest = 0, total = 0, got = 0;
    // Include probability (per mille) that gives about `target` Includes.
    mdl.randomize_model((target * 1000) / (ncls * ncl * nf * 2));
    foreach (exp_cls[b]) exp_cls[b] = mdl.predict(x.x[b]);
    for (int k = 0; k < NC; k++) begin
      int hi = (k == NC-1) ? ncls : lo + (ncls + NC - 1) / NC;
      if (hi > ncls) hi = ncls;
      mdl.compile(lo, hi, prog);
      if (prog.size() > longest) longest = prog.size();
      total += prog.size();
      send({(k == 0), 1'b1, 8'(hi - lo), 22'(prog.size())});
      foreach (prog[i]) send({16'h0, prog[i]});
      lo = hi;
    end
    send({1'b0, 1'b0, 30'(nf)});
    for (int f = 0; f < nf; f++) begin
      if (f == nf - 1) want_first = 1;
      send(x.word(f)[SW-1:0]);
      if (f == nf - 1) last_feat_cycle = cycle;
    end
    m_tready = 1;
    while (got < BATCH) begin
      @(negedge clk); #1;
      if (m_tvalid) begin
        check(int'(m_tdata) == exp_cls[got],
              $sformatf("%s datapoint %0d class %0d exp %0d", name, got, m_tdata, exp_cls[got]));
        got++;
      end
    end
    m_tready = 0;
    check(!imem_overflow, {name, " fits"});
    check(first_out_cycle - last_feat_cycle == longest + 7, {name, " latency"});
    $display("%s: %0d instructions in total, longest core program %0d, 5-core batch latency %0d clocks",
             name, total, longest, first_out_cycle - last_feat_cycle + BATCH);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    workload("EMG",                8,   8,  100,  1490);
    workload("Human Activity",     561, 6,  100,  7560);
    workload("Gesture Phase",      50,  5,  200,  8570);
    workload("Sensorless Drives",  48,  11, 200, 16610);
    workload("Gas Sensor Drift",   128, 6,  200,  6020);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
