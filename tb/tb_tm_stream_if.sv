// tb_tm_stream_if - testbench of the packet stream interface.
//
// Sends, with random valid gaps, an instruction stream for three cores
// (first header with the new-stream bit), then a feature stream, and
// monitors the outputs.  Checks: every core's clear and every instruction
// write land on the core the header routes them to, in order and with the
// right data; class counts are written per core; a new-stream instruction
// header clears all cores and the model; feature packets are broadcast in
// order; start pulses once, with the last feature packet; s_tready stays
// low until run_done; a fourth instruction header without the new-stream
// bit stays on the last core.  Then 40 random rounds repeat this with
// random core counts (sometimes more programs than cores), program lengths
// (including empty ones), class counts, feature counts and new-stream bits,
// and every clock checks that s_tready is low exactly while running.
module tb_tm_stream_if;
  import tm_pkg::*;
  localparam int SW = 32, BATCH = 32, NC = 3;
  logic clk = 0, rst_n = 0;
  logic [SW-1:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready;
  logic new_stream, model_clear, cls_wr, fm_clear, fm_wr_en, start, running;
  logic run_done = 0;
  logic im_clear [NC], im_wr_en [NC];
  logic [15:0] im_wr_data;
  logic [1:0] cls_wr_core;
  logic [7:0] cls_wr_count;
  logic [BATCH-1:0] fm_wr_data;

  logic [15:0] got_instr [NC][$];
  logic [15:0] exp_instr [NC][$];
  logic [BATCH-1:0] got_feat[$], exp_feat[$];
  int got_cls [NC];
  int n_clear [NC];
  int n_model_clear = 0, n_start = 0, n_new = 0;
  bit start_with_feat = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tm_stream_if #(.STREAM_W(SW), .BATCH(BATCH), .NUM_CORES(NC)) dut (.*);

  for (genvar k = 0; k < NC; k++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (im_clear[k]) begin got_instr[k].delete(); n_clear[k]++; end
      if (im_wr_en[k]) got_instr[k].push_back(im_wr_data);
    end
  end

  always @(negedge clk) if (rst_n) check(s_tready == !running, "s_tready is !running");

  always @(posedge clk) if (rst_n) begin
    if (cls_wr) got_cls[cls_wr_core] = int'(cls_wr_count);
    if (model_clear) n_model_clear++;
    if (new_stream) n_new++;
    if (fm_clear) got_feat.delete();
    if (fm_wr_en) got_feat.push_back(fm_wr_data);
    if (start) begin
      n_start++;
      start_with_feat = fm_wr_en || (got_feat.size() == 0);
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic send(logic [SW-1:0] w);
    while ($urandom % 3 == 0) @(negedge clk);
    s_tdata = w; s_tvalid = 1;
    do @(posedge clk); while (!s_tready);
    #1 s_tvalid = 0;
    @(negedge clk);
  endtask

  task automatic instr_group(bit nw, int k, int ncls, int n);
    send({nw, 1'b1, 8'(ncls), 22'(n)});
    exp_instr[k].delete();
    for (int i = 0; i < n; i++) begin
      logic [15:0] w = 16'($urandom);
      exp_instr[k].push_back(w);
      send({16'($urandom), w});
    end
  endtask

  initial begin
    foreach (n_clear[k]) begin n_clear[k] = 0; got_cls[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    instr_group(1, 0, 3, 7);
    instr_group(0, 1, 2, 5);
    instr_group(0, 2, 4, 9);
    check(n_model_clear == 1 && n_new == 1, "one model clear");
    for (int k = 0; k < NC; k++) begin
      check(got_instr[k] == exp_instr[k], $sformatf("core %0d program", k));
      check(n_clear[k] == ((k == 0) ? 1 : 2), $sformatf("core %0d clears %0d", k, n_clear[k]));
    end
    check(got_cls[0] == 3 && got_cls[1] == 2 && got_cls[2] == 4, "class counts");
    // extra header without new-stream: stays on the last core
    instr_group(0, 2, 1, 4);
    check(got_instr[2] == exp_instr[2], "last core reprogrammed");
    check(got_cls[2] == 1, "last core class count");
    // features
    send({1'b0, 1'b0, 30'd12});
    for (int f = 0; f < 12; f++) begin
      automatic logic [31:0] w = $urandom;
      exp_feat.push_back(w);
      send(w);
    end
    check(got_feat == exp_feat, "features broadcast in order");
    check(n_start == 1, "one start");
    check(start_with_feat, "start with the last feature packet");
    check(running && !s_tready, "not ready while running");
    repeat (5) @(negedge clk);
    check(!s_tready, "still not ready");
    run_done = 1;
    @(negedge clk) run_done = 0;
    check(s_tready && !running, "ready after run_done");
    // new stream: clears every core
    instr_group(1, 0, 2, 3);
    check(n_model_clear == 2, "second model clear");
    check(got_instr[1].size() == 0 && got_instr[2].size() == 0, "other cores cleared");
    check(got_instr[0] == exp_instr[0], "core 0 new program");
    // zero-length feature stream starts at once
    send({1'b1, 1'b0, 30'd0});
    check(n_start == 2 && running, "empty feature stream starts");
    run_done = 1;
    @(negedge clk) run_done = 0;
    // random rounds
    for (int r = 0; r < 40; r++) begin
      automatic int ncore = 1 + $urandom % (NC + 1);
      int ncls [NC];
      automatic int nm0 = n_model_clear, ns0 = n_start, nn0 = n_new, nf;
      automatic bit nw = $urandom % 2;
      for (int k = 0; k < ncore; k++) begin
        automatic int kk = (k < NC) ? k : NC - 1;
        ncls[kk] = 1 + $urandom % 8;
        instr_group(k == 0, kk, ncls[kk], $urandom % 12);
      end
      check(n_model_clear == nm0 + 1, $sformatf("round %0d model clear", r));
      for (int k = 0; k < NC; k++)
        if (k < ncore) begin
          check(got_instr[k] == exp_instr[k], $sformatf("round %0d core %0d program", r, k));
          check(got_cls[k] == ncls[k], $sformatf("round %0d core %0d classes", r, k));
        end else
          check(got_instr[k].size() == 0, $sformatf("round %0d core %0d empty", r, k));
      nf = $urandom % 20;
      exp_feat.delete();
      send({nw, 1'b0, 30'(nf)});
      for (int f = 0; f < nf; f++) begin
        automatic logic [31:0] w = $urandom;
        exp_feat.push_back(w);
        send(w);
      end
      check(got_feat == exp_feat, $sformatf("round %0d features", r));
      check(n_start == ns0 + 1 && running, $sformatf("round %0d start", r));
      check(n_new == nn0 + 1 + int'(nw), $sformatf("round %0d new-stream count", r));
      repeat ($urandom % 6) @(negedge clk);
      run_done = 1;
      @(negedge clk) run_done = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
