// tm_instr_mem - instruction memory of one inference core.
//
// Holds the compressed model as DEPTH 16-bit Include instructions.  It is
// filled in order: `clear` rewinds the write pointer (a new model is about
// to arrive), and each `wr_en` appends one instruction at the pointer.  The
// number of instructions written so far is `count`, which the fetch stage
// uses as the program length.  Writes beyond DEPTH are dropped and raise
// `overflow` until the next clear.  The read port is synchronous: the word
// at `rd_addr` appears on `rd_data` one clock later, as in a block RAM.
// The paper names this memory and its 16-bit width; its depth (24576, room
// for the ~17,000 Includes the paper quotes for MNIST) and the append-only
// write port are this design's choices.
module tm_instr_mem
  import tm_pkg::*;
#(
  parameter int unsigned DEPTH = 24576,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          wr_en,
  input  logic [INSTR_W-1:0] wr_data,
  output logic [AW:0]   count,
  output logic          overflow,
  input  logic [AW-1:0] rd_addr,
  output logic [INSTR_W-1:0] rd_data
);

  logic [INSTR_W-1:0] mem [DEPTH];
  logic               wr_ok;

  assign wr_ok = wr_en && (count < (AW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr_ok) mem[count[AW-1:0]] <= wr_data;
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      count    <= '0;
      overflow <= 1'b0;
    end else if (wr_en) begin
      if (wr_ok) count <= count + 1'b1;
      else       overflow <= 1'b1;
    end
  end

endmodule
