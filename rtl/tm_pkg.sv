// tm_pkg - types and constants shared by the compressed Tsetlin Machine
// inference accelerator.
//
// The model is stored as a list of 16-bit Include instructions, one per TA
// whose action is Include.  Bit layout (MSB first):
//   [15]    pol    clause polarity tracker: 0 = clause counts +1, 1 = -1
//   [14]    cc     clause-change bit, toggles when a new clause starts
//   [13]    e      class-change bit, toggles when a new class starts
//   [12:1]  offset number of Boolean features from the previous Include of
//                  the same clause (from feature 0 for the first Include)
//   [0]     lit    L: 0 = the feature f itself, 1 = its complement ~f
// The field order and the 16-bit total follow the paper; the paper's figure
// prints a 13-bit offset, which does not fit in 16 bits with the other four
// bits, so the offset here is 12 bits.  The meaning of the bit values of
// pol and L is this design's choice.
//
// Stream headers (one STREAM_W word): [MSB] new stream, [MSB-1] kind
// (1 = instruction header, 0 = feature header).  An instruction header then
// carries an 8-bit class number and the instruction number in the rest; a
// feature header carries the number of feature packets in all remaining
// bits.  The field widths are this design's choice.
package tm_pkg;

  localparam int unsigned INSTR_W     = 16;
  localparam int unsigned OFFSET_W    = 12;
  localparam int unsigned HDR_CLASS_W = 8;

  typedef struct packed {
    logic                pol;
    logic                cc;
    logic                e;
    logic [OFFSET_W-1:0] offset;
    logic                lit;
  } instr_t;

  typedef enum logic {
    HDR_FEATURE = 1'b0,
    HDR_INSTR   = 1'b1
  } hdr_kind_e;

endpackage
