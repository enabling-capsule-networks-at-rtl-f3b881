// Testbench for squash_norm_unit: random vectors of 4..32 components, fed one
// per clock. After each vector the square register must equal the integer sum
// of squares and the norm must match the two-range table model. Also checks
// that `clear` empties the register and that full-scale inputs do not overflow.
module tb_squash_norm_unit;
  import capsnet_ref_pkg::*;
  logic        clk = 0, rst_n = 1, clear = 0, acc_en = 0;
  logic [7:0]  x = 0;
  logic [19:0] s;
  logic [7:0]  norm;
  int checks = 0, failures = 0;

  squash_norm_unit dut (.clk, .rst_n, .clear, .acc_en, .x, .s, .norm);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_vector(int n, int amp, bit full_scale);
    longint sum = 0;
    @(negedge clk); clear = 1; acc_en = 0;
    @(negedge clk); clear = 0;
    checks++;
    if (s != 0) begin failures++; $display("FAIL clear"); end
    for (int i = 0; i < n; i++) begin
      int v;
      v = full_scale ? -128 : int'($urandom_range(2 * amp, 0)) - amp;
      x = 8'(v); acc_en = 1;
      sum += v * v;
      @(negedge clk);
    end
    acc_en = 0;
    #1;
    checks += 2;
    if (longint'(s) != sum) begin failures++; $display("FAIL s=%0d exp=%0d", s, sum); end
    if (int'(norm) != sqrt_ref(sum)) begin failures++; $display("FAIL norm=%0d exp=%0d", norm, sqrt_ref(sum)); end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int sizes[4] = '{4, 8, 16, 32};
      int amps[4]  = '{8, 20, 60, 128};
      run_vector(sizes[t % 4], amps[(t / 4) % 4], 1'b0);
    end
    run_vector(32, 0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
