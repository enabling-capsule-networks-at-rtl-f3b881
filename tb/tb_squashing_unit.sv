// Testbench for squashing_unit, both variants: every norm code with random
// components. Checks the selected coefficient and the saturated product
// against the real-valued model, and bounds the coefficient error against the
// exact n/(1+n^2) (squash-exp within 0.06 below the breakpoint, squash-pow2
// within 0.17 -- its linear 2^v fit adds to the 1-2^-n error -- table within one LSB).
module tb_squashing_unit;
  import capsnet_ref_pkg::*;
  import capsnet_nl_pkg::*;
  logic [7:0] norm, x;
  logic [7:0] coef_e, coef_p, y_e, y_p;
  int checks = 0, failures = 0;
  int fn_branch = 0, lut_branch = 0, sat = 0;

  squashing_unit #(.VARIANT(SQUASH_EXP))  dut_exp  (.norm, .x, .coef(coef_e), .y(y_e));
  squashing_unit #(.VARIANT(SQUASH_POW2)) dut_pow2 (.norm, .x, .coef(coef_p), .y(y_p));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 256; n++) begin
      for (int r = 0; r < 16; r++) begin
        int xv, ce, cp;
        real ex;
        xv = (r == 0) ? -128 : (r == 1) ? 127 : int'($urandom_range(255, 0)) - 128;
        norm = 8'(n); x = 8'(xv);
        #1;
        ce = coef_ref(n, 1'b0);
        cp = coef_ref(n, 1'b1);
        checks += 4;
        if (int'(coef_e) != ce) begin failures++; $display("FAIL exp coef n=%0d got %0d exp %0d", n, coef_e, ce); end
        if (int'(coef_p) != cp) begin failures++; $display("FAIL pow2 coef n=%0d got %0d exp %0d", n, coef_p, cp); end
        if (int'($signed(y_e)) != squash_y_ref(xv, ce)) begin failures++; $display("FAIL exp y n=%0d x=%0d", n, xv); end
        if (int'($signed(y_p)) != squash_y_ref(xv, cp)) begin failures++; $display("FAIL pow2 y n=%0d x=%0d", n, xv); end
        if (squash_y_ref(xv, ce) == 127 || squash_y_ref(xv, ce) == -128) sat++;
        if (r == 0) begin
          ex = exact_coef(real'(n) / 32.0);
          checks += 2;
          if (n < 24) fn_branch++; else lut_branch++;
          if (absr(real'(coef_e) / 256.0 - ex) > ((n < 24) ? 0.06 : 0.004)) begin
            failures++; $display("FAIL exp accuracy n=%0d coef=%0d", n, coef_e);
          end
          if (absr(real'(coef_p) / 256.0 - ex) > ((n < 32) ? 0.17 : 0.004)) begin
            failures++; $display("FAIL pow2 accuracy n=%0d coef=%0d", n, coef_p);
          end
        end
      end
    end
    checks++;
    if (fn_branch == 0 || lut_branch == 0 || sat == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
