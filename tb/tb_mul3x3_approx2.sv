// Testbench of MUL3x3_2: all 64 input pairs against the truth-table model.
// Checks the cell's error rate (6/64) and mean error distance (32/64 =
// 0.5), and that the prediction flag is high exactly for a[2:1] = b[2:1] =
// 11 (four input pairs).
module tb_mul3x3_approx2;
  import mul_ref_pkg::*;

  logic [2:0] a, b;
  logic [5:0] p;
  logic       hit;
  int checks = 0, failures = 0;

  mul3x3_approx2 dut (.a(a), .b(b), .p(p), .pred_hit(hit));

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
    int unsigned n_err, sum_ed, n_hit;
    int ed;
    n_err = 0; sum_ed = 0; n_hit = 0;
    for (int i = 0; i < 64; i++) begin
      a = 3'(i / 8); b = 3'(i % 8);
      #1;
      check(int'(p) == int'(ref3_2(a, b)),
            $sformatf("%0d x %0d = %0d, expected %0d", a, b, p, ref3_2(a, b)));
      check(hit == (a[2] & a[1] & b[2] & b[1]),
            $sformatf("prediction flag %0b at %0d x %0d", hit, a, b));
      if (hit) n_hit++;
      ed = int'(p) - int'(a) * int'(b);
      if (ed != 0) begin
        n_err++;
        sum_ed += (ed < 0) ? -ed : ed;
      end
    end
    check(n_err == 6, $sformatf("ER count %0d, expected 6", n_err));
    check(sum_ed == 32, $sformatf("sum ED %0d, expected 32 (MED 0.5)", sum_ed));
    check(n_hit == 4, $sformatf("prediction hits %0d, expected 4", n_hit));
    $display("MUL3x3_2: ER = %0d/64, MED = %0.3f", n_err, real'(sum_ed) / 64.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
