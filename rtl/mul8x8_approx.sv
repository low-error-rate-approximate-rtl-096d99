// Approximate 8x8 unsigned multiplier for DNN inference (top level).
//
// The operands are split into slices A = {A[7:6], A[5:3], A[2:0]} and
// likewise B. Nine small multipliers form the partial products:
//   M0 A[2:0]xB[2:0]  M1 A[5:3]xB[2:0]  M2 A[7:6]xB[2:0]
//   M3 A[2:0]xB[5:3]  M4 A[5:3]xB[5:3]  M5 A[7:6]xB[5:3]
//   M6 A[2:0]xB[7:6]  M7 A[5:3]xB[7:6]  M8 A[7:6]xB[7:6]
// M0..M7 are approximate 3x3 cells (a 2-bit slice enters zero-extended,
// where the cells are exact since the product is at most 21); M8 is an
// exact 2x2 multiplier. The partial products are shifted and summed by
// pp_adder. Only M0, M1, M3 and M4 can therefore be inexact.
//
// VARIANT selects the aggregation:
//   MUL8X8_1  M0..M7 = MUL3x3_1
//   MUL8X8_2  M0..M7 = MUL3x3_2 (default: the most accurate one in DNNs)
//   MUL8X8_3  M0..M7 = MUL3x3_2, M2 and its shifter removed, which assumes
//             retrained weights whose top two bits are 00
// The slice assignment, the multiplier types and the removal of M2 follow
// the paper; the default choice of variant 2 and the pred_hit observation
// port are this design's own.
//
// Interface: a, b 8-bit unsigned operands; p 16-bit approximate product;
// pred_hit[i] is high when the prediction unit of Mi fired (always 0 in
// MUL8X8_1). Purely combinational, no clock or reset.
module mul8x8_approx
  import mul_pkg::*;
#(
  parameter variant_e VARIANT = MUL8X8_2
) (
  input  logic [OP_W-1:0]   a,
  input  logic [OP_W-1:0]   b,
  output logic [PROD_W-1:0] p,
  output logic [N_PP3-1:0]  pred_hit
);

  // Operand slices, zero-extended to 3 bits: index 0 = [2:0], 1 = [5:3],
  // 2 = [7:6].
  logic [2:0] as [3];
  logic [2:0] bs [3];

  assign as[0] = a[2:0];
  assign as[1] = a[5:3];
  assign as[2] = {1'b0, a[7:6]};
  assign bs[0] = b[2:0];
  assign bs[1] = b[5:3];
  assign bs[2] = {1'b0, b[7:6]};

  // Operand slice indices of M0..M7 (M = 3*j + i reads A slice i and B
  // slice j).
  localparam int unsigned A_SEL [N_PP3] = '{0, 1, 2, 0, 1, 2, 0, 1};
  localparam int unsigned B_SEL [N_PP3] = '{0, 0, 0, 1, 1, 1, 2, 2};

  logic [PP3_W-1:0] pp3 [N_PP3];
  logic [PP2_W-1:0] pp2;

  for (genvar i = 0; i < N_PP3; i++) begin : g_m
    if (VARIANT == MUL8X8_3 && i == 2) begin : g_removed
      assign pp3[i]      = '0;
      assign pred_hit[i] = 1'b0;
    end else if (VARIANT == MUL8X8_1) begin : g_mul1
      mul3x3_approx1 u_mul (
        .a (as[A_SEL[i]]),
        .b (bs[B_SEL[i]]),
        .p (pp3[i])
      );
      assign pred_hit[i] = 1'b0;
    end else begin : g_mul2
      mul3x3_approx2 u_mul (
        .a        (as[A_SEL[i]]),
        .b        (bs[B_SEL[i]]),
        .p        (pp3[i]),
        .pred_hit (pred_hit[i])
      );
    end
  end

  mul2x2_exact u_m8 (
    .a (a[7:6]),
    .b (b[7:6]),
    .p (pp2)
  );

  pp_adder #(
    .HAS_M2 (VARIANT != MUL8X8_3)
  ) u_add (
    .pp3 (pp3),
    .pp2 (pp2),
    .sum (p)
  );

endmodule
