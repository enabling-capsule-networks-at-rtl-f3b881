// Testbench for pow2u: exhaustive over all 10-bit arguments (4 fraction bits).
// Each result is compared with floor((1+v)*2^u*256) from the real-valued model
// and with the exact 2^a (error of the linear fit 1+v stays below 0.09).
module tb_pow2u;
  import capsnet_ref_pkg::*;
  logic signed [9:0] a;
  logic        [8:0] y;
  int checks = 0, failures = 0;

  pow2u #(.IN_W(10), .IN_FRAC(4), .OUT_FRAC(8)) dut (.a(a), .y(y));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -512; i < 512; i++) begin
      int exp_code;
      real av;
      a = 10'(i);
      #1;
      av = real'(i) / 16.0;
      exp_code = pow2_ref(av, 8);
      checks++;
      if (int'(y) != exp_code) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d y=%0d exp=%0d", i, y, exp_code);
      end
      if (i <= 0) begin
        checks++;
        if ((real'(y) / 256.0 - 2.0 ** av) > 0.09 || (2.0 ** av - real'(y) / 256.0) > 0.01) begin
          failures++;
          $display("FAIL accuracy a=%0d y=%0d", i, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
