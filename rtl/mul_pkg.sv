// Shared types and constants of the approximate 8x8 multiplier.
//
// The 8-bit operands are cut into three slices: bits [2:0], [5:3] and [7:6].
// Each pair of slices is multiplied by a small multiplier M0..M8 whose
// partial product is shifted to the weight of its two slices and summed.
// The variant type selects which of the three aggregations is built:
//   MUL8X8_1  M0..M7 are MUL3x3_1 (5-bit result, O5 forced to 0)
//   MUL8X8_2  M0..M7 are MUL3x3_2 (MUL3x3_1 plus the O5/O4 prediction unit)
//   MUL8X8_3  as MUL8X8_2, but M2 (A[7:6] x B[2:0]) and its shifter removed
// In all three, M8 (A[7:6] x B[7:6]) is an exact 2x2 multiplier.
package mul_pkg;

  typedef enum logic [1:0] {
    MUL8X8_1 = 2'd1,
    MUL8X8_2 = 2'd2,
    MUL8X8_3 = 2'd3
  } variant_e;

  localparam int unsigned OP_W   = 8;   // operand width
  localparam int unsigned PROD_W = 16;  // product width
  localparam int unsigned PP3_W  = 6;   // 3x3 partial product width (O5..O0)
  localparam int unsigned PP2_W  = 4;   // 2x2 partial product width
  localparam int unsigned N_PP3  = 8;   // number of 3x3 multipliers, M0..M7

  // Left shift of each partial product, index = M number. M0..M7 are the
  // 3x3 multipliers, M8 the 2x2. The shift is the sum of the low bit
  // positions of the two slices the multiplier reads (0, 3 or 6).
  localparam int unsigned PP_SHIFT [9] = '{0, 3, 6, 3, 6, 9, 6, 9, 12};

endpackage
