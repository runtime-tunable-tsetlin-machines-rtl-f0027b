// tm_literal_select - turns a decoded instruction into an included literal.
//
// Stage 2 (same clock as decode): the offset is added to the feature
// pointer of the current clause, which restarts from 0 at every new clause,
// and the sum addresses the feature memory (fmem_rd_addr, combinational).
// Stage 3: the memory returns the feature word for all BATCH datapoints and
// the L bit chooses the feature itself (L=0) or its complement (L=1); the
// result leaves on s3_literal together with the instruction's polarity and
// its boundary flags, registered at the end of stage 2.  The paper's figure
// shows the offset selecting the feature word and L choosing f or ~f; that
// the offset is relative to the previous Include of the same clause (the
// paper's "number of TAs until the next TA Include action") and counts
// features rather than literals is this design's reading.
module tm_literal_select
  import tm_pkg::*;
#(
  parameter int unsigned BATCH = 32,
  parameter int unsigned FAW   = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             dec_valid,
  input  instr_t           dec_instr,
  input  logic             dec_new_clause,
  input  logic             dec_new_class,
  input  logic             dec_last,
  output logic [FAW-1:0]   fmem_rd_addr,
  input  logic [BATCH-1:0] fmem_rd_data,
  output logic             s3_valid,
  output logic [BATCH-1:0] s3_literal,
  output logic             s3_pol,
  output logic             s3_new_clause,
  output logic             s3_new_class,
  output logic             s3_last
);

  logic [FAW-1:0] ptr_q;
  logic [FAW-1:0] ptr_base;
  logic           lit_q;

  assign ptr_base     = dec_new_clause ? '0 : ptr_q;
  assign fmem_rd_addr = ptr_base + FAW'(dec_instr.offset);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q         <= '0;
      s3_valid      <= 1'b0;
      lit_q         <= 1'b0;
      s3_pol        <= 1'b0;
      s3_new_clause <= 1'b0;
      s3_new_class  <= 1'b0;
      s3_last       <= 1'b0;
    end else begin
      s3_valid <= dec_valid;
      if (dec_valid) begin
        ptr_q         <= fmem_rd_addr;
        lit_q         <= dec_instr.lit;
        s3_pol        <= dec_instr.pol;
        s3_new_clause <= dec_new_clause;
        s3_new_class  <= dec_new_class;
        s3_last       <= dec_last;
      end
    end
  end

  assign s3_literal = lit_q ? ~fmem_rd_data : fmem_rd_data;

endmodule
