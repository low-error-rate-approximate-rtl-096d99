// MUL3x3_2: approximate 3x3 unsigned multiplier with prediction unit.
//
// Built from MUL3x3_1: O3..O0 are its outputs unchanged, and O5/O4 come
// from the prediction unit. When alpha[2:1] = beta[2:1] = 11 the result is
// raised by 16 (O5 = 1, O4 = 0), so 6x6 -> 40, 6x7 -> 46, 7x6 -> 46,
// 7x7 -> 45 (each off by 4 instead of 12 to 20). 5x7 and 7x5 stay at 27.
// The error rate stays 6/64, the mean error distance drops to 32/64 = 0.5.
//
// Note: the paper's table lists 38 as the value of 7x6, but the output bits
// it prints for that row (1 0 1 1 1 0) are 46, which is also what the
// described prediction unit yields; this cell gives 46.
//
// O5 of the inner MUL3x3_1 is the constant 0 and is left unused.
//
// Interface: a, b are the 3-bit operands; p = O[5:0]; pred_hit is high when
// the prediction unit corrected the result. Purely combinational.
module mul3x3_approx2 (
  input  logic [2:0] a,
  input  logic [2:0] b,
  output logic [5:0] p,
  output logic       pred_hit
);

  logic [5:0] p1;

  mul3x3_approx1 u_base (
    .a (a),
    .b (b),
    .p (p1)
  );

  pred_unit u_pred (
    .a_hi  (a[2:1]),
    .b_hi  (b[2:1]),
    .o4_in (p1[4]),
    .o5    (p[5]),
    .o4    (p[4]),
    .hit   (pred_hit)
  );

  assign p[3:0] = p1[3:0];

endmodule
