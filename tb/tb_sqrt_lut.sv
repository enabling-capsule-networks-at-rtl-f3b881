// Testbench for sqrt_lut: every squared norm below 2^17 (both tables and the
// saturated region) plus random large values. Compares with the real-valued
// model (round(32*sqrt(step centre)), saturate at 255) and with the exact root.
module tb_sqrt_lut;
  import capsnet_ref_pkg::*;
  logic [19:0] s;
  logic [7:0]  norm;
  int checks = 0, failures = 0;
  int lo_hits = 0, hi_hits = 0, sat_hits = 0;

  sqrt_lut dut (.s(s), .norm(norm));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int v);
    int e;
    real ex;
    s = 20'(v);
    #1;
    e = sqrt_ref(v);
    checks++;
    if (int'(norm) != e) begin
      failures++;
      if (failures < 10) $display("FAIL s=%0d norm=%0d exp=%0d", v, norm, e);
    end
    ex = $sqrt(real'(v) / 1024.0);
    if (v < 4096) lo_hits++; else if (v < 65536) hi_hits++; else sat_hits++;
    if (v >= 1024 && v < 65536) begin
      checks++;
      if (real'(norm) / 32.0 - ex > 0.1 || ex - real'(norm) / 32.0 > 0.1) begin
        failures++;
        $display("FAIL accuracy s=%0d norm=%0d", v, norm);
      end
    end
  endtask

  initial begin
    for (int v = 0; v < 131072; v++) check(v);
    for (int i = 0; i < 1000; i++) check(int'($urandom_range(1048575, 131072)));
    checks++;
    if (lo_hits == 0 || hi_hits == 0 || sat_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
