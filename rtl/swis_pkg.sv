// swis_pkg: types and constants shared by the SWIS accelerator.
//
// A SWIS weight group of GROUP weights is described, for one cycle of a
// double-shift processing element, by one weight word: the sign of every
// weight, two mask vectors (one per shift processed in that cycle) and the two
// 3-bit shift values those masks belong to. Activations are unsigned 8-bit
// values packed GROUP to a vector. The sizes follow the paper's main
// configuration: 8-bit underlying precision, group size 4, an 8x8 array,
// two shifts per cycle. The word layout itself is this design's choice.
package swis_pkg;

  localparam int unsigned GROUP   = 4;  // PE group size (weights per MAC vector)
  localparam int unsigned ACT_W   = 8;  // activation width
  localparam int unsigned SHIFT_W = 3;  // bits of one shift value (positions 0..7)
  localparam int unsigned ROWS    = 8;  // systolic array rows
  localparam int unsigned COLS    = 8;  // systolic array columns
  localparam int unsigned MAX_PAIRS = 4; // 8 shifts / 2 shifts per cycle
  // Accumulator width printed in the PE figure: 16 + log2(group size).
  localparam int unsigned ACC_W   = 16 + $clog2(GROUP);

  // Quantization scheme of the weights currently streamed.
  typedef enum logic {
    MODE_SWIS   = 1'b0,  // every shift value stored
    MODE_SWIS_C = 1'b1   // one offset per group, shifts consecutive
  } swis_mode_e;

  // One double-shift weight word for one PE column.
  typedef struct packed {
    logic [GROUP-1:0]   sign;   // 1 = negative weight
    logic [GROUP-1:0]   mask1;  // mask bits for shift s1
    logic [GROUP-1:0]   mask0;  // mask bits for shift s0
    logic [SHIFT_W-1:0] s1;     // second shift of the pair
    logic [SHIFT_W-1:0] s0;     // first shift of the pair (SWIS-C: group offset)
  } wgt_word_t;

  localparam int unsigned WGT_WORD_W = $bits(wgt_word_t);  // 18 bits

  // Packed activation vector of one group.
  typedef logic [GROUP-1:0][ACT_W-1:0] act_vec_t;

endpackage
