// tb_tm_accelerator - end-to-end testbench of the accelerator with three
// cores.
//
// Acting as the model-training host, it streams random Tsetlin Machines
// (split by classes across the cores, one instruction header per core) and
// batches of 32 random datapoints, reads the classifications from the
// output FIFO and compares each with the reference model.  Between runs it
// changes the model size, the number of classes and the number of features
// without any reset of the hardware, as the paper's runtime tuning does.
// It also checks the latency from the last feature packet to the first
// result (largest core program + 7 clocks) and counts that each mechanism
// happened at least once: new-stream reprogramming, multi-core splitting,
// a core left without instructions, a feature header with the new-stream
// bit, input back-pressure while computing, output-FIFO back-pressure,
// clause and class changes and a tie between class sums.
module tb_tm_accelerator;
  import tm_tb_pkg::*;

  localparam int NC    = 3;
  localparam int BATCH = 32;
  localparam int SW    = 32;

  logic clk = 0, rst_n = 0;
  logic [SW-1:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready, m_tvalid, m_tready = 0, busy, imem_overflow;
  logic [7:0] m_tdata;

  int checks = 0, failures = 0, cycle = 0;
  int n_reprogram = 0, n_multicore = 0, n_idle_core = 0, n_feat_newstream = 0;
  int n_in_stall = 0, n_out_stall = 0, n_clause_chg = 0, n_class_chg = 0;
  int n_tie = 0;
  int last_feat_cycle, first_out_cycle;
  bit want_first;
  int hold_ready;     // host refuses results for this many clocks

  always #5 clk = ~clk;

  tm_accelerator #(.NUM_CORES(NC)) dut (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tready, .m_tdata, .m_tvalid,
    .m_tready, .busy, .imem_overflow
  );

  always @(posedge clk) begin
    cycle++;
    if (s_tvalid && !s_tready) n_in_stall++;
    if (dut.pushing_q && dut.fifo_full) n_out_stall++;
    if (m_tvalid && want_first) begin
      first_out_cycle = cycle;
      want_first = 0;
    end
  end

  int clause_chg_k [NC];
  int class_chg_k  [NC];
  for (genvar k = 0; k < NC; k++) begin : g_mon
    initial begin clause_chg_k[k] = 0; class_chg_k[k] = 0; end
    always @(posedge clk) begin
      if (dut.g_core[k].u_core.dec_valid && dut.g_core[k].u_core.dec_new_clause
          && !dut.g_core[k].u_core.dec_new_class) clause_chg_k[k]++;
      if (dut.g_core[k].u_core.dec_valid && dut.g_core[k].u_core.dec_new_class
          && !dut.g_core[k].u_core.u_fetch.first_q) class_chg_k[k]++;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic send(logic [SW-1:0] w);
    while ($urandom % 4 == 0) @(negedge clk);   // random gaps
    s_tdata = w; s_tvalid = 1;
    do @(posedge clk); while (!s_tready);
    #1 s_tvalid = 0;
    @(negedge clk);
  endtask

  // Streams model `mdl` split over `slices` cores.
  task automatic load_model(tm_model mdl, int slices);
    logic [15:0] prog[$];
    int lo = 0;
    for (int k = 0; k < slices; k++) begin
      int hi = (k == slices-1) ? mdl.n_class : lo + mdl.n_class / slices;
      mdl.compile(lo, hi, prog);
      send({(k == 0), 1'b1, 8'(hi - lo), 22'(prog.size())});
      foreach (prog[i]) send({16'h0, prog[i]});
      lo = hi;
    end
    n_reprogram++;
    if (slices > 1) n_multicore++;
    if (slices < NC) n_idle_core++;
  endtask

  task automatic send_batch(tm_model mdl, tm_batch x, bit newstream);
    send({newstream, 1'b0, 30'(mdl.n_feat)});
    if (newstream) n_feat_newstream++;
    for (int f = 0; f < mdl.n_feat; f++) begin
      if (f == mdl.n_feat - 1) want_first = 1;
      send(x.word(f)[SW-1:0]);
      if (f == mdl.n_feat - 1) last_feat_cycle = cycle;
    end
  endtask

  task automatic collect(tm_model mdl, tm_batch x, int hold, int max_prog);
    int got = 0;
    hold_ready = hold;
    while (got < BATCH) begin
      @(negedge clk);
      if (hold_ready > 0) begin m_tready = 0; hold_ready--; end
      else m_tready = ($urandom % 3 != 0);
      #1;
      if (m_tvalid && m_tready) begin
        int e = mdl.predict(x.x[got]);
        int s0 = mdl.class_sum(e, x.x[got]);
        for (int m = 0; m < mdl.n_class; m++)
          if (m != e && mdl.class_sum(m, x.x[got]) == s0) begin n_tie++; break; end
        check(int'(m_tdata) == e, $sformatf("datapoint %0d class %0d exp %0d", got, m_tdata, e));
        got++;
      end
    end
    @(negedge clk) m_tready = 0;
    if (max_prog >= 0)
      check(first_out_cycle - last_feat_cycle == max_prog + 7,
            $sformatf("latency %0d, longest program %0d", first_out_cycle - last_feat_cycle, max_prog));
  endtask

  // One batch, host reads results as they come; latency checked.
  task automatic infer(tm_model mdl, bit newstream, int max_prog);
    tm_batch x = new(BATCH, mdl.n_feat);
    send_batch(mdl, x, newstream);
    collect(mdl, x, 0, max_prog);
  endtask

  // Two batches back to back while the host is slow to read: the second
  // batch waits at the input and its results wait for FIFO space.
  task automatic infer_overlapped(tm_model mdl);
    tm_batch x1 = new(BATCH, mdl.n_feat);
    tm_batch x2 = new(BATCH, mdl.n_feat);
    send_batch(mdl, x1, 0);
    fork
      send_batch(mdl, x2, 0);
      collect(mdl, x1, 400, -1);
    join
    collect(mdl, x2, 0, -1);
  endtask

  function automatic int longest(tm_model mdl, int slices);
    logic [15:0] prog[$];
    int lo = 0, mx = 0;
    for (int k = 0; k < slices; k++) begin
      int hi = (k == slices-1) ? mdl.n_class : lo + mdl.n_class / slices;
      mdl.compile(lo, hi, prog);
      if (prog.size() > mx) mx = prog.size();
      lo = hi;
    end
    return mx;
  endfunction

  initial begin
    tm_model a, b, c;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // model A: 6 classes over 3 cores
    a = new(24, 6, 10); a.randomize_model(60);
    load_model(a, 3);
    infer(a, 0, longest(a, 3));
    infer(a, 1, longest(a, 3));
    infer_overlapped(a);
    // model B: retuned at run time, 4 classes, more features, 2 cores
    b = new(60, 4, 16); b.randomize_model(30);
    load_model(b, 2);
    infer(b, 0, longest(b, 2));
    // model C: tiny, heavy ties, single core
    c = new(5, 3, 4); c.randomize_model(300);
    load_model(c, 1);
    infer(c, 0, longest(c, 1));
    foreach (clause_chg_k[k]) begin
      n_clause_chg += clause_chg_k[k];
      n_class_chg  += class_chg_k[k];
    end
    check(!imem_overflow, "no instruction memory overflow");
    check(n_reprogram > 0,      "mechanism: new-stream reprogramming");
    check(n_multicore > 0,      "mechanism: multi-core split");
    check(n_idle_core > 0,      "mechanism: core without instructions");
    check(n_feat_newstream > 0, "mechanism: feature header with new-stream bit");
    check(n_in_stall > 0,       "mechanism: input back-pressure");
    check(n_out_stall > 0,      "mechanism: output FIFO back-pressure");
    check(n_clause_chg > 0,     "mechanism: clause change");
    check(n_class_chg > 0,      "mechanism: class change");
    check(n_tie > 0,            "mechanism: tied class sums");
    $display("mechanisms: reprogram=%0d multicore=%0d idle_core=%0d feat_newstream=%0d in_stall=%0d out_stall=%0d clause_chg=%0d class_chg=%0d tie=%0d",
             n_reprogram, n_multicore, n_idle_core, n_feat_newstream, n_in_stall,
             n_out_stall, n_clause_chg, n_class_chg, n_tie);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
