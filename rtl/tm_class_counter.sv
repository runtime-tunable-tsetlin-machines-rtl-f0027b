// tm_class_counter - global class numbering for one or more cores.
//
// Each instruction header carries the number of classes of the model slice
// that goes to one core.  This block stores that number per core (`wr`),
// forgets all of them on `clear` (a new model; a write in the same clock
// still lands), and turns each core's local
// class index into a global one by adding the number of classes held by all
// lower-numbered cores: core 0 holds classes 0..n0-1, core 1 holds
// n0..n0+n1-1, and so on.  `total` is the number of classes of the whole
// model.  The mapping is combinational.  The paper shows a Class Counter
// fed by the AXIS interface next to the shared argmax of the multi-core
// design but does not detail it; this prefix-sum form is this design's.
module tm_class_counter #(
  parameter int unsigned NUM_CORES = 1,
  parameter int unsigned CLASS_W   = 8,
  parameter int unsigned CORE_W    = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               wr,
  input  logic [CORE_W-1:0]  wr_core,
  input  logic [CLASS_W-1:0] wr_count,
  input  logic [CLASS_W-1:0] local_idx  [NUM_CORES],
  output logic [CLASS_W-1:0] global_idx [NUM_CORES],
  output logic [CLASS_W-1:0] base       [NUM_CORES],
  output logic [CLASS_W:0]   total
);

  logic [CLASS_W-1:0] count_q [NUM_CORES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NUM_CORES; k++) count_q[k] <= '0;
    end else begin
      for (int k = 0; k < NUM_CORES; k++) begin
        if (wr && wr_core == CORE_W'(k)) count_q[k] <= wr_count;
        else if (clear)                  count_q[k] <= '0;
      end
    end
  end

  always_comb begin
    logic [CLASS_W:0] acc;
    acc = '0;
    for (int k = 0; k < NUM_CORES; k++) begin
      base[k]       = acc[CLASS_W-1:0];
      global_idx[k] = acc[CLASS_W-1:0] + local_idx[k];
      acc           = acc + {1'b0, count_q[k]};
    end
    total = acc;
  end

endmodule
