// MUL3x3_1: approximate 3x3 unsigned multiplier with a 5-bit result.
//
// Of the 64 products of two 3-bit numbers only six exceed 31 and need the
// sixth output bit: 5x7, 6x6, 6x7, 7x5, 7x6 and 7x7. This cell redefines
// those six entries so that O5 = 0 (35->27, 36->24, 42->30, 35->27, 42->30,
// 49->29) and keeps the other 58 exact, so its error rate is 6/64 and its
// mean error distance 72/64 = 1.125. The outputs are the sum-of-products
// equations of the K-map of that modified truth table.
//
// One departure from the published equations: the second product term of
// O1 is written as a1 & ~a0 & b0. With b1 in that place (as printed) the
// equation disagrees with the cell's own truth table at 2x2, 2x6, 6x2 and
// 6x6; with b0 it reproduces the table exactly (O1 is then the exact
// a1*b0 XOR a0*b1).
//
// Interface: a, b are the 3-bit operands (alpha, beta); p = O[5:0].
// Purely combinational, no clock.
module mul3x3_approx1 (
  input  logic [2:0] a,
  input  logic [2:0] b,
  output logic [5:0] p
);

  always_comb begin
    p[0] = a[0] & b[0];

    p[1] = (~a[1] &  a[0] &  b[1])
         | ( a[1] & ~a[0] &  b[0])
         | ( a[1] & ~b[1] &  b[0])
         | ( a[0] &  b[1] & ~b[0]);

    p[2] = (~a[2] &  a[1] & ~a[0] &  b[1])
         | ( a[1] & ~b[2] &  b[1] & ~b[0])
         | (~a[2] & ~a[1] &  a[0] &  b[2])
         | (~a[2] &  a[0] &  b[2] & ~b[1])
         | ( a[1] &  b[2] &  b[1] &  b[0])
         | ( a[2] & ~a[1] & ~a[0] &  b[0])
         | ( a[2] & ~a[0] & ~b[1] &  b[0])
         | ( a[2] &  a[0] & ~b[2] &  b[0])
         | ( a[2] &  a[0] &  b[2] & ~b[0]);

    p[3] = ( a[1] & ~a[0] &  b[2])
         | (~a[2] &  a[1] &  a[0] & ~b[2] & b[1] & b[0])
         | ( a[1] &  b[2] & ~b[1])
         | ( a[2] & ~a[1] &  b[1])
         | ( a[2] &  a[0] &  b[2] &  b[0])
         | ( a[2] &  b[1] & ~b[0]);

    p[4] = ( a[1] &  a[0] &  b[2] & b[1])
         | ( a[2] &  b[2])
         | ( a[2] &  a[1] &  b[1] & b[0]);

    p[5] = 1'b0;
  end

endmodule
