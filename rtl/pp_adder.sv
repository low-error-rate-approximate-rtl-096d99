// Shifters and adder of the 8x8 aggregation.
//
// Each partial product of M0..M8 is shifted left by the sum of the low bit
// positions of the two operand slices it was formed from (slices start at
// bits 0, 3 and 6), giving shifts 0,3,6,3,6,9,6,9,12 for M0..M8; the
// shifters are therefore plain wiring. The shifted terms are added into
// the 16-bit product. The paper does not give the structure of the adder;
// it is written here as one multi-operand sum and left to synthesis to map
// (for instance onto a carry-save tree).
//
// HAS_M2 = 0 drops M2's term and its shifter (variant MUL8x8_3); pp3[2] is
// then not read.
//
// No approximate product can exceed 46 per 3x3 cell, below the exact 49, so
// the sum never passes 255*255 and fits 16 bits without a carry out.
//
// Interface: pp3[i] is the 6-bit product of Mi (i = 0..7), pp2 the 4-bit
// product of M8; sum is the 16-bit result. Purely combinational.
module pp_adder
  import mul_pkg::*;
#(
  parameter bit HAS_M2 = 1'b1
) (
  input  logic [PP3_W-1:0]  pp3 [N_PP3],
  input  logic [PP2_W-1:0]  pp2,
  output logic [PROD_W-1:0] sum
);

  logic [PROD_W-1:0] term [9];

  always_comb begin
    for (int i = 0; i < N_PP3; i++) begin
      term[i] = PROD_W'(pp3[i]) << PP_SHIFT[i];
    end
    term[8] = PROD_W'(pp2) << PP_SHIFT[8];
    if (!HAS_M2) term[2] = '0;

    sum = '0;
    for (int i = 0; i < 9; i++) begin
      sum = sum + term[i];
    end
  end

endmodule
