// Shared types and constants of the approximate multiplier and the mean filter.
//
// operand_t / product_t are the 8-bit operand and 16-bit product of the 8x8
// multiplier. MASK_ONE_NINTH is the 1/9 weight of the 3x3 mean-filter mask as an
// unsigned 0.8 fixed-point fraction: round(256/9) = 28 (28/256 = 0.1094). The
// mask value and its encoding are this design's choice; the paper only says
// every mask entry is 1/9.
package approx_pkg;
  typedef logic [7:0]  operand_t;
  typedef logic [15:0] product_t;

  localparam operand_t MASK_ONE_NINTH = 8'd28;
endpackage
