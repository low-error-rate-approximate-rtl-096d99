// End-to-end testbench of the approximate 8x8 multiplier, all three
// variants side by side, over all 65,536 operand pairs.
//
// Every product is compared with the truth-table reference model. Over the
// whole sweep the number of inexact products and the summed error distance
// of each variant are compared with totals computed beforehand from the same
// truth tables: 17,824 inexact products for variants 1 and 2 and 48,304 for
// variant 3; summed error distance 5,971,968, 2,557,696 and 23,434,944.
//
// It also counts how often each mechanism of the design acted and fails a
// mechanism that never did: an approximate 3x3 cell giving an inexact
// partial product, the prediction unit firing (variant 2), the removed M2
// changing the result (variant 3 against variant 2), and M8 contributing.
module tb_mul8x8_approx;
  import mul_pkg::*;
  import mul_ref_pkg::*;

  logic [7:0]  a, b;
  logic [15:0] p1, p2, p3;
  logic [7:0]  hit1, hit2, hit3;
  int checks = 0, failures = 0;

  mul8x8_approx #(.VARIANT(MUL8X8_1)) dut1 (.a(a), .b(b), .p(p1), .pred_hit(hit1));
  mul8x8_approx #(.VARIANT(MUL8X8_2)) dut2 (.a(a), .b(b), .p(p2), .pred_hit(hit2));
  mul8x8_approx #(.VARIANT(MUL8X8_3)) dut3 (.a(a), .b(b), .p(p3), .pred_hit(hit3));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint unsigned absdiff(int unsigned x, int unsigned y);
    return (x > y) ? longint'(x - y) : longint'(y - x);
  endfunction

  initial begin
    int unsigned      n_err [3];
    longint unsigned  sum_ed [3];
    int unsigned      n_pred, n_m2_effect, n_m8, n_hit1, n_hit3_m2;
    int unsigned      ex;
    n_err = '{0, 0, 0};
    sum_ed = '{0, 0, 0};
    n_pred = 0; n_m2_effect = 0; n_m8 = 0; n_hit1 = 0; n_hit3_m2 = 0;

    for (int i = 0; i < 65536; i++) begin
      {a, b} = 16'(i);
      #1;
      ex = int'(a) * int'(b);
      check(int'(p1) == ref8(1, a, b),
            $sformatf("v1 %0d x %0d = %0d, expected %0d", a, b, p1, ref8(1, a, b)));
      check(int'(p2) == ref8(2, a, b),
            $sformatf("v2 %0d x %0d = %0d, expected %0d", a, b, p2, ref8(2, a, b)));
      check(int'(p3) == ref8(3, a, b),
            $sformatf("v3 %0d x %0d = %0d, expected %0d", a, b, p3, ref8(3, a, b)));
      if (p1 != 16'(ex)) n_err[0]++;
      if (p2 != 16'(ex)) n_err[1]++;
      if (p3 != 16'(ex)) n_err[2]++;
      sum_ed[0] += absdiff(p1, ex);
      sum_ed[1] += absdiff(p2, ex);
      sum_ed[2] += absdiff(p3, ex);
      if (hit2 != '0)  n_pred++;
      if (hit1 != '0)  n_hit1++;
      if (hit3[2])     n_hit3_m2++;
      if (p3 != p2)    n_m2_effect++;
      if (a[7:6] != 0 && b[7:6] != 0) n_m8++;
    end

    check(n_err[0] == 17824, $sformatf("v1 inexact count %0d", n_err[0]));
    check(n_err[1] == 17824, $sformatf("v2 inexact count %0d", n_err[1]));
    check(n_err[2] == 48304, $sformatf("v3 inexact count %0d", n_err[2]));
    check(sum_ed[0] == 5971968,  $sformatf("v1 summed ED %0d", sum_ed[0]));
    check(sum_ed[1] == 2557696,  $sformatf("v2 summed ED %0d", sum_ed[1]));
    check(sum_ed[2] == 23434944, $sformatf("v3 summed ED %0d", sum_ed[2]));
    check(n_hit1 == 0, "variant 1 has no prediction unit but flagged a hit");
    check(n_hit3_m2 == 0, "variant 3 has no M2 but M2 flagged a hit");

    $display("mechanism approximate 3x3 (inexact product, v1): %0d", n_err[0]);
    $display("mechanism prediction unit fired (v2):             %0d", n_pred);
    $display("mechanism M2 removed changes result (v3 vs v2):   %0d", n_m2_effect);
    $display("mechanism exact M8 contributes:                   %0d", n_m8);
    check(n_err[0] > 0,    "approximation never acted");
    check(n_pred > 0,      "prediction unit never fired");
    check(n_m2_effect > 0, "M2 removal never changed a result");
    check(n_m8 > 0,        "M8 never contributed");

    for (int v = 0; v < 3; v++)
      $display("MUL8x8_%0d: ER = %0.2f%%  MED = %0.2f", v + 1,
               100.0 * real'(n_err[v]) / 65536.0, real'(sum_ed[v]) / 65536.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
