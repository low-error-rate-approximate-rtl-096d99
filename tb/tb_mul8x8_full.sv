// Full-size testbench of the approximate 8x8 multiplier at its default
// configuration (variant MUL8x8_2), exhaustive over all 65,536 unsigned
// operand pairs.
//
// Each product is compared with the truth-table reference model, and the
// error metrics are computed over the uniform input space:
//   ER   = share of inexact products
//   MED  = mean |approx - exact|
//   NMED = MED / (2^8 - 1)^2
//   MRED = mean |approx - exact| / exact over nonzero exact products
// The inexact count (17,824) and summed error distance (2,557,696) are
// checked against totals worked out beforehand from the truth tables. The
// metrics published for this variant (ER 20.49 %, MED 114.83, NMED 0.18 %,
// MRED 1.42 %) were obtained under a measurement setup that is not fully
// specified; they are printed for comparison and not checked.
module tb_mul8x8_full;
  import mul_ref_pkg::*;

  logic [7:0]  a, b;
  logic [15:0] p;
  logic [7:0]  hit;
  int checks = 0, failures = 0;

  mul8x8_approx dut (.a(a), .b(b), .p(p), .pred_hit(hit));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned     n_err, n_pred, ex, ed;
    longint unsigned sum_ed;
    real             sum_red;
    n_err = 0; n_pred = 0; sum_ed = 0; sum_red = 0.0;
    for (int i = 0; i < 65536; i++) begin
      {a, b} = 16'(i);
      #1;
      ex = int'(a) * int'(b);
      checks++;
      if (int'(p) != ref8(2, a, b)) begin
        failures++;
        if (failures < 20)
          $display("FAIL %0d x %0d = %0d, expected %0d", a, b, p, ref8(2, a, b));
      end
      ed = (int'(p) > ex) ? int'(p) - ex : ex - int'(p);
      if (ed != 0) n_err++;
      sum_ed += ed;
      if (ex != 0) sum_red += real'(ed) / real'(ex);
      if (hit != '0) n_pred++;
    end
    checks += 3;
    if (n_err != 17824)   begin failures++; $display("FAIL inexact count %0d", n_err);  end
    if (sum_ed != 2557696) begin failures++; $display("FAIL summed ED %0d", sum_ed); end
    if (n_pred == 0)      begin failures++; $display("FAIL prediction unit never fired"); end
    $display("MUL8x8_2 uniform inputs: ER = %0.2f%%  MED = %0.2f  NMED = %0.3f%%  MRED = %0.2f%%",
             100.0 * real'(n_err) / 65536.0, real'(sum_ed) / 65536.0,
             100.0 * real'(sum_ed) / 65536.0 / 65025.0, 100.0 * sum_red / 65536.0);
    $display("published for MUL8x8_2:  ER = 20.49%%  MED = 114.83  NMED = 0.18%%  MRED = 1.42%%");
    $display("prediction unit fired on %0d operand pairs", n_pred);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
