// tm_core - one inference core (the paper's base accelerator datapath).
//
// Contains the instruction memory, the feature memory and the four-stage
// pipeline of the paper's instruction execution cycle:
//   stage 1  Fetch            tm_fetch_decode drives the instruction address
//   stage 2  Extract Feature  decode, feature address from the offset
//   stage 3  Clause Acc       literal select and AND into the clause outputs
//   stage 4  Class Sum Update +1/-1 into the class sums
// One instruction enters per clock and none ever stalls, so a program of N
// instructions issues in N clocks.  Counting the clock in which `start` is
// high as clock 0, instruction i is fetched in clock i+1 and has its class
// sum update in clock i+4, so the last class sum is on ev_* in clock N+4.
// `done` pulses in that same clock (or in clock 1 for an empty program) and
// `busy` is
// high from start until then.  The memories are written through the
// im_*/fm_* ports by the stream interface: `im_clear`/`fm_clear` rewind
// them, `*_wr_en` appends.  The program length is the number of
// instructions written since the last im_clear.  The class sums leave the
// core with a core-local class index; the argmax that consumes them sits
// outside, so several cores can share it.
module tm_core
  import tm_pkg::*;
#(
  parameter int unsigned BATCH      = 32,
  parameter int unsigned IMEM_DEPTH = 24576,
  parameter int unsigned FMEM_DEPTH = 4096,
  parameter int unsigned SUM_W      = 16,
  parameter int unsigned CLASS_W    = 8,
  parameter int unsigned AW         = $clog2(IMEM_DEPTH),
  parameter int unsigned FAW        = $clog2(FMEM_DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    im_clear,
  input  logic                    im_wr_en,
  input  logic [INSTR_W-1:0]      im_wr_data,
  input  logic                    fm_clear,
  input  logic                    fm_wr_en,
  input  logic [BATCH-1:0]        fm_wr_data,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  output logic [AW:0]             n_instr,
  output logic                    im_overflow,
  output logic                    ev_valid,
  output logic [CLASS_W-1:0]      ev_idx,
  output logic signed [SUM_W-1:0] ev_sums [BATCH],
  output logic                    ev_final
);

  logic [AW-1:0]      im_rd_addr;
  logic [INSTR_W-1:0] im_rd_data;
  logic [FAW-1:0]     fm_rd_addr;
  logic [BATCH-1:0]   fm_rd_data;
  logic [FAW:0]       fm_count;

  logic   dec_valid, dec_new_clause, dec_new_class, dec_last, fetching;
  instr_t dec_instr;

  logic             s3_valid, s3_pol, s3_new_clause, s3_new_class, s3_last;
  logic [BATCH-1:0] s3_literal;

  logic             cl_valid, cl_pol, cl_class_end, cl_final;
  logic [BATCH-1:0] cl_out;
  logic [15:0]      clause_count;
  logic             empty_done;

  tm_instr_mem #(.DEPTH(IMEM_DEPTH), .AW(AW)) u_imem (
    .clk, .rst_n, .clear(im_clear), .wr_en(im_wr_en), .wr_data(im_wr_data),
    .count(n_instr), .overflow(im_overflow),
    .rd_addr(im_rd_addr), .rd_data(im_rd_data)
  );

  tm_feature_mem #(.BATCH(BATCH), .DEPTH(FMEM_DEPTH), .AW(FAW)) u_fmem (
    .clk, .rst_n, .clear(fm_clear), .wr_en(fm_wr_en), .wr_data(fm_wr_data),
    .count(fm_count), .rd_addr(fm_rd_addr), .rd_data(fm_rd_data)
  );

  tm_fetch_decode #(.AW(AW)) u_fetch (
    .clk, .rst_n, .start, .n_instr,
    .imem_rd_addr(im_rd_addr), .imem_rd_data(im_rd_data),
    .dec_valid, .dec_instr, .dec_new_clause, .dec_new_class, .dec_last,
    .fetching
  );

  tm_literal_select #(.BATCH(BATCH), .FAW(FAW)) u_lsel (
    .clk, .rst_n, .dec_valid, .dec_instr, .dec_new_clause, .dec_new_class,
    .dec_last, .fmem_rd_addr(fm_rd_addr), .fmem_rd_data(fm_rd_data),
    .s3_valid, .s3_literal, .s3_pol, .s3_new_clause, .s3_new_class, .s3_last
  );

  tm_clause_acc #(.BATCH(BATCH), .CNT_W(16)) u_clause (
    .clk, .rst_n, .start, .s3_valid, .s3_literal, .s3_pol, .s3_new_clause,
    .s3_last, .next_valid(dec_valid), .next_new_clause(dec_new_clause),
    .next_new_class(dec_new_class),
    .cl_valid, .cl_out, .cl_pol, .cl_class_end, .cl_final, .clause_count
  );

  tm_class_sum #(.BATCH(BATCH), .SUM_W(SUM_W), .CLASS_W(CLASS_W)) u_csum (
    .clk, .rst_n, .start, .cl_valid, .cl_out, .cl_pol, .cl_class_end,
    .cl_final, .ev_valid, .ev_idx, .ev_sums, .ev_final
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      empty_done <= 1'b0;
    end else begin
      empty_done <= start && (n_instr == '0);
      if (start)     busy <= 1'b1;
      else if (done) busy <= 1'b0;
    end
  end

  assign done = empty_done || (ev_valid && ev_final);

  // A new program or batch must not be loaded while the core runs.
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(im_wr_en || fm_wr_en || im_clear || fm_clear));

endmodule
