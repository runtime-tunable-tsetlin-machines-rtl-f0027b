// tm_feature_mem - feature memory of one inference core.
//
// Word i holds Boolean feature i of every datapoint in the batch: bit b is
// feature i of datapoint b, so one read returns the same feature for all
// BATCH datapoints at once.  The memory is filled like a FIFO, in feature
// order (`clear` rewinds, `wr_en` appends), and read at random by literal
// select with a one-clock synchronous read.  Reading a word that has not
// been written in the current batch returns all zeros, so a model that
// points past the features it was given sees them as 0.  The paper shows
// this store as the "Feature FIFO" with 32-bit rows; the depth (4096, the
// reach of the 12-bit offset from feature 0) and the zero-read rule are this
// design's choices.
module tm_feature_mem #(
  parameter int unsigned BATCH = 32,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             wr_en,
  input  logic [BATCH-1:0] wr_data,
  output logic [AW:0]      count,
  input  logic [AW-1:0]    rd_addr,
  output logic [BATCH-1:0] rd_data
);

  logic [BATCH-1:0] mem [DEPTH];
  logic [BATCH-1:0] rd_word;
  logic             rd_in_range;
  logic             wr_ok;

  assign wr_ok = wr_en && (count < (AW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr_ok) mem[count[AW-1:0]] <= wr_data;
    rd_word <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       rd_in_range <= 1'b0;
    else              rd_in_range <= ({1'b0, rd_addr} < count);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       count <= '0;
    else if (clear)   count <= '0;
    else if (wr_ok)   count <= count + 1'b1;
  end

  assign rd_data = rd_in_range ? rd_word : '0;

endmodule
