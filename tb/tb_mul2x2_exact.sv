// Testbench of the exact 2x2 multiplier: all 16 input pairs against a*b.
module tb_mul2x2_exact;
  logic [1:0] a, b;
  logic [3:0] p;
  int checks = 0, failures = 0;

  mul2x2_exact dut (.a(a), .b(b), .p(p));

  initial begin : watchdog
    #10000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      {a, b} = 4'(i);
      #1;
      checks++;
      if (int'(p) != int'(a) * int'(b)) begin
        failures++;
        $display("FAIL %0d x %0d = %0d", a, b, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
