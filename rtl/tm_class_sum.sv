// tm_class_sum - class sums and core-local class counter (stage 4,
// "Class Sum Update").
//
// Keeps one signed SUM_W-bit class sum per batch datapoint.  For every
// finished clause (cl_valid) each datapoint whose clause output is 1 adds
// +1 (cl_pol = 0) or -1 (cl_pol = 1).  When the clause also ends the class,
// the updated sums leave on ev_sums with the core-local class index ev_idx
// (ev_valid, one clock, registered), the sums restart from 0 and the class
// counter advances; ev_final marks the last class of the program.  The
// +1/-1 accumulation follows the paper; the sum width (16 bits, enough for
// 32767 clauses of one polarity per class) is this design's choice.
module tm_class_sum #(
  parameter int unsigned BATCH   = 32,
  parameter int unsigned SUM_W   = 16,
  parameter int unsigned CLASS_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    cl_valid,
  input  logic [BATCH-1:0]        cl_out,
  input  logic                    cl_pol,
  input  logic                    cl_class_end,
  input  logic                    cl_final,
  output logic                    ev_valid,
  output logic [CLASS_W-1:0]      ev_idx,
  output logic signed [SUM_W-1:0] ev_sums [BATCH],
  output logic                    ev_final
);

  logic signed [SUM_W-1:0] sum_q [BATCH];
  logic signed [SUM_W-1:0] sum_d [BATCH];
  logic [CLASS_W-1:0]      class_q;

  always_comb begin
    for (int b = 0; b < BATCH; b++) begin
      if (cl_out[b]) sum_d[b] = cl_pol ? sum_q[b] - SUM_W'(1) : sum_q[b] + SUM_W'(1);
      else           sum_d[b] = sum_q[b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      class_q  <= '0;
      ev_valid <= 1'b0;
      ev_idx   <= '0;
      ev_final <= 1'b0;
      for (int b = 0; b < BATCH; b++) begin
        sum_q[b]   <= '0;
        ev_sums[b] <= '0;
      end
    end else begin
      ev_valid <= 1'b0;
      ev_final <= 1'b0;
      if (start) begin
        class_q <= '0;
        for (int b = 0; b < BATCH; b++) sum_q[b] <= '0;
      end else if (cl_valid) begin
        if (cl_class_end) begin
          ev_valid <= 1'b1;
          ev_idx   <= class_q;
          ev_final <= cl_final;
          class_q  <= class_q + 1'b1;
          for (int b = 0; b < BATCH; b++) begin
            ev_sums[b] <= sum_d[b];
            sum_q[b]   <= '0;
          end
        end else begin
          for (int b = 0; b < BATCH; b++) sum_q[b] <= sum_d[b];
        end
      end
    end
  end

endmodule
