// Exact 2x2 unsigned multiplier (M8 of the 8x8 aggregation).
//
// It multiplies the two most significant slices, A[7:6] x B[7:6]. Those
// bits are the most valuable of the product, so this multiplier is kept
// exact in all three 8x8 variants. Written as the four output gates of the
// 2x2 product:
//   P0 = a0 b0, P1 = a1 b0 ^ a0 b1, P2 = a1 b1 & ~(a0 b0), P3 = a1 a0 b1 b0.
//
// Interface: a, b 2-bit operands, p 4-bit product. Purely combinational.
module mul2x2_exact (
  input  logic [1:0] a,
  input  logic [1:0] b,
  output logic [3:0] p
);

  always_comb begin
    p[0] = a[0] & b[0];
    p[1] = (a[1] & b[0]) ^ (a[0] & b[1]);
    p[2] = (a[1] & b[1]) & ~(a[0] & b[0]);
    p[3] = a[1] & a[0] & b[1] & b[0];
  end

endmodule
