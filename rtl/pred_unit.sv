// Prediction unit of MUL3x3_2.
//
// The four largest errors of MUL3x3_1 (6x6, 6x7, 7x6, 7x7) share the input
// pattern alpha[2:1] = 11 and beta[2:1] = 11. The unit detects that pattern
// (hit = a2 & a1 & b2 & b1) and then drives O5 = 1, O4 = 0, which adds 16 to
// the MUL3x3_1 value; in every other case O5 = 0 and O4 passes through from
// MUL3x3_1. O3..O0 are not touched.
//
// Interface: a_hi = alpha[2:1], b_hi = beta[2:1], o4_in = O4 of MUL3x3_1;
// o5, o4 are the corrected top bits, hit flags the predicted case.
// Purely combinational.
module pred_unit (
  input  logic [1:0] a_hi,
  input  logic [1:0] b_hi,
  input  logic       o4_in,
  output logic       o5,
  output logic       o4,
  output logic       hit
);

  always_comb begin
    hit = &{a_hi, b_hi};
    o5  = hit;
    o4  = o4_in & ~hit;
  end

endmodule
