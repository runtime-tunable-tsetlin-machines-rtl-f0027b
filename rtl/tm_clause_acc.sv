// tm_clause_acc - clause-output registers and clause counter (stage 3,
// "Clause Acc").
//
// One clause-output bit per batch datapoint.  The first literal of a clause
// loads the registers; each further literal of the same clause is ANDed in.
// Whether the current instruction is the clause's last is known in the same
// clock, because the next instruction is being decoded one stage behind
// (next_valid/next_new_clause/next_new_class) or the current one is the
// program's last.  When the clause ends, its finished output, its polarity
// and whether the class ends with it are registered towards the class-sum
// stage (cl_* outputs, valid for one clock), and the clause counter
// advances.  Clauses with no Include have no instructions and are never
// seen, which matches a TM whose empty clauses output 0 at inference.  The
// AND accumulation and the toggle-driven completion follow the paper; the
// one-ahead look at the next instruction is this design's way of fitting
// the paper's one-clock-per-stage timing.
module tm_clause_acc #(
  parameter int unsigned BATCH = 32,
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             s3_valid,
  input  logic [BATCH-1:0] s3_literal,
  input  logic             s3_pol,
  input  logic             s3_new_clause,
  input  logic             s3_last,
  input  logic             next_valid,
  input  logic             next_new_clause,
  input  logic             next_new_class,
  output logic             cl_valid,
  output logic [BATCH-1:0] cl_out,
  output logic             cl_pol,
  output logic             cl_class_end,
  output logic             cl_final,
  output logic [CNT_W-1:0] clause_count
);

  logic [BATCH-1:0] clause_q;
  logic [BATCH-1:0] clause_d;
  logic             ends_clause, ends_class;

  assign clause_d    = s3_new_clause ? s3_literal : (clause_q & s3_literal);
  assign ends_clause = s3_last || (next_valid && next_new_clause);
  assign ends_class  = s3_last || (next_valid && next_new_class);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clause_q     <= '0;
      cl_valid     <= 1'b0;
      cl_out       <= '0;
      cl_pol       <= 1'b0;
      cl_class_end <= 1'b0;
      cl_final     <= 1'b0;
      clause_count <= '0;
    end else begin
      cl_valid <= 1'b0;
      if (start) clause_count <= '0;
      if (s3_valid) begin
        clause_q <= clause_d;
        if (ends_clause) begin
          cl_valid     <= 1'b1;
          cl_out       <= clause_d;
          cl_pol       <= s3_pol;
          cl_class_end <= ends_class;
          cl_final     <= s3_last;
          clause_count <= clause_count + 1'b1;
        end
      end
    end
  end

endmodule
