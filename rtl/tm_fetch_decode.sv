// tm_fetch_decode - instruction fetch and decode (pipeline stages 1 and 2).
//
// A `start` pulse rewinds the program counter and the core then fetches one
// instruction per clock from address 0 up to n_instr-1 (stage 1, "Fetch").
// The instruction memory answers one clock later; that clock is stage 2
// ("Extract Feature"), in which this block decodes the word.  A clause
// boundary is seen as a toggle of CC (or of E) against the previous
// instruction, a class boundary as a toggle of E; the first instruction of
// a run opens both.  The decoded fields and flags leave combinationally on
// the dec_* outputs during stage 2; `dec_last` marks the final instruction.
// There are no stalls: with n_instr instructions the last one is decoded
// n_instr clocks after start.  Toggle detection follows the paper; treating
// an E toggle as also closing the clause is this design's choice.
module tm_fetch_decode
  import tm_pkg::*;
#(
  parameter int unsigned AW = 15
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   n_instr,
  output logic [AW-1:0] imem_rd_addr,
  input  logic [INSTR_W-1:0] imem_rd_data,
  output logic          dec_valid,
  output instr_t        dec_instr,
  output logic          dec_new_clause,
  output logic          dec_new_class,
  output logic          dec_last,
  output logic          fetching
);

  logic [AW:0] pc;
  logic        f_valid_q;    // stage-2 word valid
  logic        f_last_q;
  logic        first_q;      // next decoded word is the first of the run
  logic        prev_cc_q, prev_e_q;

  assign imem_rd_addr = pc[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc        <= '0;
      fetching  <= 1'b0;
      f_valid_q <= 1'b0;
      f_last_q  <= 1'b0;
    end else begin
      f_valid_q <= 1'b0;
      f_last_q  <= 1'b0;
      if (start) begin
        pc       <= '0;
        fetching <= (n_instr != '0);
      end else if (fetching) begin
        f_valid_q <= 1'b1;
        f_last_q  <= (pc == n_instr - 1'b1);
        pc        <= pc + 1'b1;
        if (pc == n_instr - 1'b1) fetching <= 1'b0;
      end
    end
  end

  assign dec_valid      = f_valid_q;
  assign dec_instr      = instr_t'(imem_rd_data);
  assign dec_last       = f_last_q;
  assign dec_new_class  = f_valid_q && (first_q || (dec_instr.e != prev_e_q));
  assign dec_new_clause = f_valid_q && (first_q || (dec_instr.e != prev_e_q)
                                                || (dec_instr.cc != prev_cc_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_q   <= 1'b1;
      prev_cc_q <= 1'b0;
      prev_e_q  <= 1'b0;
    end else if (start) begin
      first_q   <= 1'b1;
    end else if (f_valid_q) begin
      first_q   <= 1'b0;
      prev_cc_q <= dec_instr.cc;
      prev_e_q  <= dec_instr.e;
    end
  end

endmodule
