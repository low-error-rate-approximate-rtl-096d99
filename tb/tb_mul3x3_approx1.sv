// Testbench of MUL3x3_1: all 64 input pairs against the truth-table model.
// It also counts the inexact entries and the summed error distance, which
// must give the cell's error rate of 6/64 and mean error distance of 1.125
// (72/64), and checks that O5 is never set.
module tb_mul3x3_approx1;
  import mul_ref_pkg::*;

  logic [2:0] a, b;
  logic [5:0] p;
  int checks = 0, failures = 0;

  mul3x3_approx1 dut (.a(a), .b(b), .p(p));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    #10000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned n_err, sum_ed;
    n_err = 0; sum_ed = 0;
    for (int i = 0; i < 64; i++) begin
      a = 3'(i / 8); b = 3'(i % 8);
      #1;
      check(int'(p) == int'(ref3_1(a, b)),
            $sformatf("%0d x %0d = %0d, expected %0d", a, b, p, ref3_1(a, b)));
      check(p[5] == 1'b0, $sformatf("O5 set at %0d x %0d", a, b));
      if (int'(p) != int'(a) * int'(b)) begin
        n_err++;
        sum_ed += int'(a) * int'(b) - int'(p);
      end
    end
    check(n_err == 6, $sformatf("ER count %0d, expected 6", n_err));
    check(sum_ed == 72, $sformatf("sum ED %0d, expected 72 (MED 1.125)", sum_ed));
    $display("MUL3x3_1: ER = %0d/64, MED = %0.3f", n_err, real'(sum_ed) / 64.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
