// tm_argmax - running argmax over class sums, one per batch datapoint.
//
// `clear` forgets everything.  In any clock, each of the NIN inputs may
// present one class (in_valid) with its global index and the class sums of
// all BATCH datapoints; in the multi-core design every core drives one
// input.  For each datapoint the block keeps the best sum seen and its
// class.  A class beats the kept one if its sum is larger, or equal with a
// lower class index, so the result does not depend on the order in which
// cores finish their classes and ties go to the lowest class.  Inputs of
// the same clock are folded in index order by a comparator chain; the kept
// values update at the clock edge.  The paper gives the argmax by name and
// function; the tie rule and the running form are this design's choices.
module tm_argmax #(
  parameter int unsigned NIN     = 1,
  parameter int unsigned BATCH   = 32,
  parameter int unsigned SUM_W   = 16,
  parameter int unsigned CLASS_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid [NIN],
  input  logic [CLASS_W-1:0]      in_idx   [NIN],
  input  logic signed [SUM_W-1:0] in_sums  [NIN][BATCH],
  output logic                    have,
  output logic [CLASS_W-1:0]      best_idx [BATCH],
  output logic signed [SUM_W-1:0] best_sum [BATCH]
);

  logic                    have_d;
  logic [CLASS_W-1:0]      idx_d [BATCH];
  logic signed [SUM_W-1:0] sum_d [BATCH];

  always_comb begin
    have_d = have;
    for (int b = 0; b < BATCH; b++) begin
      idx_d[b] = best_idx[b];
      sum_d[b] = best_sum[b];
    end
    for (int i = 0; i < NIN; i++) begin
      if (in_valid[i]) begin
        for (int b = 0; b < BATCH; b++) begin
          if (!have_d || (in_sums[i][b] > sum_d[b]) ||
              ((in_sums[i][b] == sum_d[b]) && (in_idx[i] < idx_d[b]))) begin
            idx_d[b] = in_idx[i];
            sum_d[b] = in_sums[i][b];
          end
        end
        have_d = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have <= 1'b0;
      for (int b = 0; b < BATCH; b++) begin
        best_idx[b] <= '0;
        best_sum[b] <= '0;
      end
    end else if (clear) begin
      have <= 1'b0;
      for (int b = 0; b < BATCH; b++) begin
        best_idx[b] <= '0;
        best_sum[b] <= '0;
      end
    end else begin
      have <= have_d;
      for (int b = 0; b < BATCH; b++) begin
        best_idx[b] <= idx_d[b];
        best_sum[b] <= sum_d[b];
      end
    end
  end

endmodule
