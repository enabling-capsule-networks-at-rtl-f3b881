// Testbench for log2u: every 16-bit operand with 8 fraction bits. Compares
// with w + floor(16*(k-1))/16 from the real-valued model, checks the zero
// flag, and bounds the error of the linear fit against the exact log2.
module tb_log2u;
  import capsnet_ref_pkg::*;
  logic        [15:0] f;
  logic signed [8:0]  y;
  logic               zero;
  int checks = 0, failures = 0;

  log2u #(.IN_W(16), .IN_FRAC(8), .OUT_W(9), .OUT_FRAC(4)) dut (.f(f), .y(y), .zero(zero));

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    f = 0;
    #1;
    checks++;
    if (!zero || y != -9'sd256) begin failures++; $display("FAIL zero case y=%0d", y); end
    for (int i = 1; i < 65536; i++) begin
      int e;
      real ex;
      f = 16'(i);
      #1;
      e = log2_ref(i, 8, 4);
      checks++;
      if (int'(y) != e || zero) begin
        failures++;
        if (failures < 10) $display("FAIL f=%0d y=%0d exp=%0d", i, y, e);
      end
      ex = $ln(real'(i) / 256.0) / $ln(2.0);
      if (i % 97 == 0) begin
        checks++;
        if (ex - real'(y) / 16.0 > 0.09 + 1.0 / 16.0 || real'(y) / 16.0 > ex + 1e-9) begin
          failures++;
          $display("FAIL accuracy f=%0d y=%0d exact=%f", i, y, ex);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
