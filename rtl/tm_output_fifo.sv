// tm_output_fifo - output FIFO of classifications.
//
// A synchronous first-in first-out buffer of DEPTH class indices.  The
// accelerator pushes (push/push_data) while `full` is low; the host pops
// through a valid/ready pair in the AXI4-Stream style (m_valid, m_ready,
// m_data): a word leaves in every clock in which both are high.  `clear`
// empties it.  A push and a pop in the same clock are both taken.  The
// paper gives the FIFO and its 32 entries (one batch of classifications);
// the handshake is this design's choice.
module tm_output_fifo #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned W     = 8,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         push,
  input  logic [W-1:0] push_data,
  output logic         full,
  output logic         m_valid,
  input  logic         m_ready,
  output logic [W-1:0] m_data,
  output logic [AW:0]  count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic          do_push, do_pop;

  assign full    = (count == (AW+1)'(DEPTH));
  assign m_valid = (count != '0);
  assign m_data  = mem[rd_ptr];
  assign do_push = push && !full;
  assign do_pop  = m_valid && m_ready;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (clear) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> !full);

endmodule
