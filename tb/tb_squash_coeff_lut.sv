// Testbench for squash_coeff_lut: all 256 norm codes for both breakpoints
// (0.75 for squash-exp, 1.0 for squash-pow2), against round(256*n/(1+n^2))
// computed with reals; codes below the breakpoint must read 0.
module tb_squash_coeff_lut;
  import capsnet_ref_pkg::*;
  logic [7:0] norm;
  logic [7:0] coef_e, coef_p;
  int checks = 0, failures = 0;

  squash_coeff_lut #(.THR(24)) dut_exp  (.norm(norm), .coef(coef_e));
  squash_coeff_lut #(.THR(32)) dut_pow2 (.norm(norm), .coef(coef_p));

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 256; n++) begin
      norm = 8'(n);
      #1;
      checks += 2;
      if (int'(coef_e) != coef_lut_ref(n, 24)) begin
        failures++; $display("FAIL exp n=%0d coef=%0d exp=%0d", n, coef_e, coef_lut_ref(n, 24));
      end
      if (int'(coef_p) != coef_lut_ref(n, 32)) begin
        failures++; $display("FAIL pow2 n=%0d coef=%0d exp=%0d", n, coef_p, coef_lut_ref(n, 32));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
