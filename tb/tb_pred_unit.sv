// Testbench of the prediction unit: all 32 combinations of alpha[2:1],
// beta[2:1] and the incoming O4. Expected: O5 = hit = a2&a1&b2&b1, and O4
// forced to 0 on a hit, passed through otherwise.
module tb_pred_unit;
  logic [1:0] a_hi, b_hi;
  logic       o4_in, o5, o4, hit;
  int checks = 0, failures = 0;

  pred_unit dut (.a_hi(a_hi), .b_hi(b_hi), .o4_in(o4_in), .o5(o5), .o4(o4),
                 .hit(hit));

  initial begin : watchdog
    #10000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_hit;
    for (int i = 0; i < 32; i++) begin
      {a_hi, b_hi, o4_in} = 5'(i);
      #1;
      exp_hit = (a_hi == 2'b11) && (b_hi == 2'b11);
      checks++;
      if (hit !== exp_hit || o5 !== exp_hit ||
          o4 !== (exp_hit ? 1'b0 : o4_in)) begin
        failures++;
        $display("FAIL a_hi=%b b_hi=%b o4_in=%b -> hit=%b o5=%b o4=%b",
                 a_hi, b_hi, o4_in, hit, o5, o4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
