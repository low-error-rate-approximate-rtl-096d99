// Testbench of the shifters and adder: the nine slice products of random
// 8-bit operands (6-bit for M0..M7, 4-bit for M8), which must be summed at
// weights 1,8,64,8,64,512,64,512,4096; with M2 present the sum is the
// exact product av*bv, which is checked as well. Two instances are
// checked: with M2 (variants 1 and 2) and without it (variant 3).
module tb_pp_adder;
  import mul_pkg::*;

  logic [5:0]  pp3 [8];
  logic [3:0]  pp2;
  logic [15:0] sum_full, sum_nom2;
  int checks = 0, failures = 0;

  pp_adder #(.HAS_M2(1'b1)) dut_full (.pp3(pp3), .pp2(pp2), .sum(sum_full));
  pp_adder #(.HAS_M2(1'b0)) dut_nom2 (.pp3(pp3), .pp2(pp2), .sum(sum_nom2));

  localparam int WEIGHT [9] = '{1, 8, 64, 8, 64, 512, 64, 512, 4096};

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_full, exp_nom2;
    for (int n = 0; n < 2000; n++) begin
      // Partial products as the multipliers deliver them for random
      // operands (exact slice products, 2-bit top slices), with the
      // all-zero and all-ones operands first.
      int unsigned av, bv;
      int unsigned as [3];
      int unsigned bs [3];
      av = (n == 0) ? 0 : (n == 1) ? 255 : $urandom_range(255, 0);
      bv = (n == 0) ? 0 : (n == 1) ? 255 : $urandom_range(255, 0);
      as = '{av % 8, (av / 8) % 8, av / 64};
      bs = '{bv % 8, (bv / 8) % 8, bv / 64};
      for (int i = 0; i < 8; i++) pp3[i] = 6'(as[i % 3] * bs[i / 3]);
      pp2 = 4'(as[2] * bs[2]);
      #1;
      exp_full = int'(pp2) * WEIGHT[8];
      for (int i = 0; i < 8; i++) exp_full += int'(pp3[i]) * WEIGHT[i];
      exp_nom2 = exp_full - int'(pp3[2]) * WEIGHT[2];
      checks += 3;
      if (exp_full != int'(av * bv)) begin
        failures++;
        $display("FAIL reference %0d differs from %0d x %0d", exp_full, av, bv);
      end
      if (int'(sum_full) != exp_full) begin
        failures++;
        $display("FAIL with M2: %0d, expected %0d", sum_full, exp_full);
      end
      if (int'(sum_nom2) != exp_nom2) begin
        failures++;
        $display("FAIL without M2: %0d, expected %0d", sum_nom2, exp_nom2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
