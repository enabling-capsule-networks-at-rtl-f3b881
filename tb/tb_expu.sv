// Testbench for expu: every non-positive 9-bit argument (5 fraction bits),
// the range the squash-exp unit uses. Compares with the real-valued model
// (scale by 369/256, floor, 2^u*(1+v)) and bounds the error against e^a.
module tb_expu;
  import capsnet_ref_pkg::*;
  logic signed [8:0] a;
  logic        [8:0] y;
  int checks = 0, failures = 0;

  expu #(.IN_W(9), .IN_FRAC(5), .OUT_FRAC(8)) dut (.a(a), .y(y));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -256; i <= 0; i++) begin
      int e;
      real ex;
      a = 9'(i);
      #1;
      e = exp_ref(i);
      ex = $exp(real'(i) / 32.0);
      checks += 2;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d y=%0d exp=%0d", i, y, e);
      end
      if (real'(y) / 256.0 - ex > 0.1 || ex - real'(y) / 256.0 > 0.05) begin
        failures++;
        $display("FAIL accuracy a=%0d y=%0d exact=%f", i, y, ex);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
