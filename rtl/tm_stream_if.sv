// tm_stream_if - packet stream interface (the AXIS interface of the
// multi-core design; the plain input stream of the base design).
//
// Input words arrive on an AXI4-Stream-style valid/ready port, one
// STREAM_W-bit packet per handshake.  The first packet of every group is a
// header:
//   [STREAM_W-1]  new stream: resets the accelerator's control state
//   [STREAM_W-2]  1 = instruction header, 0 = feature header
// Instruction header: [STREAM_W-3 -: 8] number of classes, [STREAM_W-11:0]
// number of instructions that follow, one per packet in bits [15:0].  The
// instructions go to one core: a header with the new-stream bit goes to
// core 0 and first clears every core's program and the class counts; each
// further instruction header goes to the next core (the last core if there
// are no more).  Feature header: [STREAM_W-3:0] number of feature packets
// that follow, packet i holding feature i of the batch in bits [BATCH-1:0];
// they are written to the feature memory of every core.  After the last
// feature packet `start` pulses and the port stops accepting (s_tready low)
// until `run_done` reports that the results are in the output FIFO.  A
// header announcing zero packets is complete by itself (zero features still
// start a run).  The two header bits follow the paper; the field widths,
// the one-instruction-per-packet format and the per-header core routing are
// this design's choices.
module tm_stream_if
  import tm_pkg::*;
#(
  parameter int unsigned STREAM_W  = 32,
  parameter int unsigned BATCH     = 32,
  parameter int unsigned NUM_CORES = 1,
  parameter int unsigned CLASS_W   = HDR_CLASS_W,
  parameter int unsigned CORE_W    = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [STREAM_W-1:0] s_tdata,
  input  logic                s_tvalid,
  output logic                s_tready,
  output logic                new_stream,
  output logic                model_clear,
  output logic                im_clear  [NUM_CORES],
  output logic                im_wr_en  [NUM_CORES],
  output logic [INSTR_W-1:0]  im_wr_data,
  output logic                cls_wr,
  output logic [CORE_W-1:0]   cls_wr_core,
  output logic [CLASS_W-1:0]  cls_wr_count,
  output logic                fm_clear,
  output logic                fm_wr_en,
  output logic [BATCH-1:0]    fm_wr_data,
  output logic                start,
  input  logic                run_done,
  output logic                running
);

  localparam int unsigned CNT_W = STREAM_W - 2;

  typedef enum logic [1:0] {S_HDR, S_INSTR, S_FEAT, S_RUN} state_e;

  state_e             state;
  logic [CNT_W-1:0]   remaining;
  logic [CORE_W-1:0]  core_q;     // core receiving the current program
  logic [CORE_W-1:0]  next_core;  // core for the next header without new-stream
  logic               take;
  logic               hdr_new;
  hdr_kind_e          hdr_kind;
  logic [CLASS_W-1:0] hdr_classes;
  logic [CNT_W-1:0]   hdr_instrs, hdr_feats;
  logic [CORE_W-1:0]  target;

  assign s_tready    = (state != S_RUN);
  assign take        = s_tvalid && s_tready;
  assign running     = (state == S_RUN);

  assign hdr_new     = s_tdata[STREAM_W-1];
  assign hdr_kind    = hdr_kind_e'(s_tdata[STREAM_W-2]);
  assign hdr_classes = s_tdata[STREAM_W-3 -: CLASS_W];
  assign hdr_instrs  = CNT_W'(s_tdata[STREAM_W-3-CLASS_W:0]);
  assign hdr_feats   = s_tdata[CNT_W-1:0];
  assign target      = hdr_new ? '0 : next_core;

  assign im_wr_data  = s_tdata[INSTR_W-1:0];
  assign fm_wr_data  = s_tdata[BATCH-1:0];

  always_comb begin
    new_stream   = 1'b0;
    model_clear  = 1'b0;
    cls_wr       = 1'b0;
    cls_wr_core  = target;
    cls_wr_count = hdr_classes;
    fm_clear     = 1'b0;
    fm_wr_en     = 1'b0;
    start        = 1'b0;
    for (int k = 0; k < NUM_CORES; k++) begin
      im_clear[k] = 1'b0;
      im_wr_en[k] = 1'b0;
    end
    if (take) begin
      case (state)
        S_HDR: begin
          new_stream = hdr_new;
          if (hdr_kind == HDR_INSTR) begin
            model_clear = hdr_new;
            cls_wr      = 1'b1;
            for (int k = 0; k < NUM_CORES; k++)
              im_clear[k] = hdr_new || (target == CORE_W'(k));
          end else begin
            fm_clear = 1'b1;
            start    = (hdr_feats == '0);
          end
        end
        S_INSTR: begin
          for (int k = 0; k < NUM_CORES; k++)
            im_wr_en[k] = (core_q == CORE_W'(k));
        end
        S_FEAT: begin
          fm_wr_en = 1'b1;
          start    = (remaining == CNT_W'(1));
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_HDR;
      remaining <= '0;
      core_q    <= '0;
      next_core <= '0;
    end else begin
      case (state)
        S_HDR: if (take) begin
          if (hdr_kind == HDR_INSTR) begin
            core_q    <= target;
            next_core <= (target == CORE_W'(NUM_CORES-1)) ? target : target + 1'b1;
            remaining <= hdr_instrs;
            if (hdr_instrs != '0) state <= S_INSTR;
          end else begin
            remaining <= hdr_feats;
            state     <= (hdr_feats != '0) ? S_FEAT : S_RUN;
          end
        end
        S_INSTR: if (take) begin
          remaining <= remaining - 1'b1;
          if (remaining == CNT_W'(1)) state <= S_HDR;
        end
        S_FEAT: if (take) begin
          remaining <= remaining - 1'b1;
          if (remaining == CNT_W'(1)) state <= S_RUN;
        end
        S_RUN: if (run_done) state <= S_HDR;
        default: state <= S_HDR;
      endcase
    end
  end

  // A run finishes only while one is in progress.
  a_done_only_when_running: assert property (@(posedge clk) disable iff (!rst_n)
    run_done |-> (state == S_RUN));

endmodule
