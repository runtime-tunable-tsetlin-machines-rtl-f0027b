// tm_accelerator - runtime-tunable compressed Tsetlin Machine inference
// accelerator, top level.
//
// A single input stream both reprograms and feeds the accelerator: an
// instruction header followed by Include instructions loads a new model
// (of any size that fits the instruction memory, with any number of
// classes), and a feature header followed by one packet per Boolean
// feature loads a batch of up to BATCH datapoints and starts inference.
// NUM_CORES inference cores run the same features against disjoint class
// ranges of the model (NUM_CORES = 1 is the base, single-core design; the
// multi-core design instantiates several).  Their class sums go, with
// global class numbers from the class counter, to one shared argmax.  When
// every core has finished, the winning class of each of the BATCH
// datapoints is pushed, datapoint 0 first, into the output FIFO, which the
// host reads through m_tvalid/m_tready/m_tdata.  While a batch is being
// computed or its results pushed, s_tready is low.
//
// Timing: for a batch whose largest core program has N instructions, the
// last class sum reaches the argmax N+4 clocks after the clock in which the
// last feature packet is accepted (clock 0), the first result enters the
// FIFO and is visible on m_tvalid after N+7, and the BATCH results follow
// one per clock if the host keeps up; a full FIFO holds the push until it
// drains.
module tm_accelerator
  import tm_pkg::*;
#(
  parameter int unsigned NUM_CORES      = 1,
  parameter int unsigned STREAM_W       = 32,
  parameter int unsigned BATCH          = 32,
  parameter int unsigned IMEM_DEPTH     = 24576,
  parameter int unsigned FMEM_DEPTH     = 4096,
  parameter int unsigned SUM_W          = 16,
  parameter int unsigned CLASS_W        = HDR_CLASS_W,
  parameter int unsigned OUT_FIFO_DEPTH = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [STREAM_W-1:0] s_tdata,
  input  logic                s_tvalid,
  output logic                s_tready,
  output logic [CLASS_W-1:0]  m_tdata,
  output logic                m_tvalid,
  input  logic                m_tready,
  output logic                busy,
  output logic                imem_overflow
);

  localparam int unsigned AW     = $clog2(IMEM_DEPTH);
  localparam int unsigned CORE_W = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;
  localparam int unsigned LANE_W = (BATCH > 1) ? $clog2(BATCH) : 1;

  logic               new_stream, model_clear, cls_wr, fm_clear, fm_wr_en;
  logic               start, run_done, running;
  logic               im_clear [NUM_CORES];
  logic               im_wr_en [NUM_CORES];
  logic [INSTR_W-1:0] im_wr_data;
  logic [CORE_W-1:0]  cls_wr_core;
  logic [CLASS_W-1:0] cls_wr_count;
  logic [BATCH-1:0]   fm_wr_data;

  logic                    core_done  [NUM_CORES];
  logic                    core_busy  [NUM_CORES];
  logic                    core_ovf   [NUM_CORES];
  logic [AW:0]             core_n     [NUM_CORES];
  logic                    ev_valid   [NUM_CORES];
  logic                    ev_final   [NUM_CORES];
  logic [CLASS_W-1:0]      ev_idx     [NUM_CORES];
  logic [CLASS_W-1:0]      ev_gidx    [NUM_CORES];
  logic [CLASS_W-1:0]      cls_base   [NUM_CORES];
  logic signed [SUM_W-1:0] ev_sums    [NUM_CORES][BATCH];
  logic [CLASS_W:0]        n_classes;

  logic                    am_have;
  logic [CLASS_W-1:0]      best_idx [BATCH];
  logic signed [SUM_W-1:0] best_sum [BATCH];

  logic [NUM_CORES-1:0] seen_q;
  logic                 all_seen;
  logic                 pushing_q;
  logic [LANE_W-1:0]    lane_q;
  logic                 fifo_full, push;
  logic [$clog2(OUT_FIFO_DEPTH):0] fifo_count;

  tm_stream_if #(.STREAM_W(STREAM_W), .BATCH(BATCH), .NUM_CORES(NUM_CORES),
                 .CLASS_W(CLASS_W)) u_if (
    .clk, .rst_n, .s_tdata, .s_tvalid, .s_tready,
    .new_stream, .model_clear, .im_clear, .im_wr_en, .im_wr_data,
    .cls_wr, .cls_wr_core, .cls_wr_count,
    .fm_clear, .fm_wr_en, .fm_wr_data, .start, .run_done, .running
  );

  for (genvar k = 0; k < NUM_CORES; k++) begin : g_core
    tm_core #(.BATCH(BATCH), .IMEM_DEPTH(IMEM_DEPTH), .FMEM_DEPTH(FMEM_DEPTH),
              .SUM_W(SUM_W), .CLASS_W(CLASS_W)) u_core (
      .clk, .rst_n,
      .im_clear(im_clear[k]), .im_wr_en(im_wr_en[k]), .im_wr_data,
      .fm_clear, .fm_wr_en, .fm_wr_data,
      .start, .busy(core_busy[k]), .done(core_done[k]), .n_instr(core_n[k]),
      .im_overflow(core_ovf[k]),
      .ev_valid(ev_valid[k]), .ev_idx(ev_idx[k]), .ev_sums(ev_sums[k]),
      .ev_final(ev_final[k])
    );
  end

  tm_class_counter #(.NUM_CORES(NUM_CORES), .CLASS_W(CLASS_W)) u_cls (
    .clk, .rst_n, .clear(model_clear), .wr(cls_wr), .wr_core(cls_wr_core),
    .wr_count(cls_wr_count), .local_idx(ev_idx), .global_idx(ev_gidx),
    .base(cls_base), .total(n_classes)
  );

  tm_argmax #(.NIN(NUM_CORES), .BATCH(BATCH), .SUM_W(SUM_W),
              .CLASS_W(CLASS_W)) u_argmax (
    .clk, .rst_n, .clear(start || new_stream), .in_valid(ev_valid),
    .in_idx(ev_gidx), .in_sums(ev_sums),
    .have(am_have), .best_idx, .best_sum
  );

  // Completion: every core reports done once per run; after the last one
  // the argmax holds the final result and the lanes are pushed in order.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen_q    <= '0;
      pushing_q <= 1'b0;
      lane_q    <= '0;
    end else begin
      if (start) seen_q <= '0;
      else for (int k = 0; k < NUM_CORES; k++)
        if (core_done[k]) seen_q[k] <= 1'b1;
      if (all_seen && !pushing_q) begin
        pushing_q <= 1'b1;
        lane_q    <= '0;
        seen_q    <= '0;
      end else if (push) begin
        lane_q <= lane_q + 1'b1;
        if (lane_q == LANE_W'(BATCH-1)) pushing_q <= 1'b0;
      end
    end
  end

  assign all_seen = running && (&seen_q);
  assign push     = pushing_q && !fifo_full;
  assign run_done = push && (lane_q == LANE_W'(BATCH-1));

  tm_output_fifo #(.DEPTH(OUT_FIFO_DEPTH), .W(CLASS_W)) u_ofifo (
    .clk, .rst_n, .clear(new_stream), .push, .push_data(best_idx[lane_q]),
    .full(fifo_full), .m_valid(m_tvalid), .m_ready(m_tready),
    .m_data(m_tdata), .count(fifo_count)
  );

  always_comb begin
    busy          = running;
    imem_overflow = 1'b0;
    for (int k = 0; k < NUM_CORES; k++) imem_overflow |= core_ovf[k];
  end

endmodule
