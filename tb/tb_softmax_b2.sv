// Testbench for softmax_b2: random logit vectors of 10, 32 and 128 elements
// (narrow and wide spreads, plus a constant vector and one with a single
// dominant element). Each vector is streamed three times (max, sum, output).
// Checks every output against the real-valued model of the base-2 softmax
// datapath, that each output appears one clock after its input is accepted,
// that `done` is registered 3n clocks after the `start` edge, and that the outputs stay close
// to the exact 2^x_i / sum_j 2^x_j and add up to about 1.
module tb_softmax_b2;
  import capsnet_nl_pkg::*;
  import capsnet_ref_pkg::*;

  logic clk = 0, rst_n = 1, start = 0, in_valid = 0;
  sm_size_e size = SM_N10;
  logic [7:0] x = 0;
  logic       in_ready, out_valid, done;
  pass_e      pass;
  logic [8:0] y;
  int checks = 0, failures = 0;

  softmax_b2 dut (.clk, .rst_n, .start, .size, .in_valid, .x, .in_ready, .pass,
                  .out_valid, .y, .done);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_y[$];
  real exact_y[$];
  real ysum;
  int cyc = 0, start_cyc = 0, n_cur = 0, done_seen = 0;
  bit acc_prev = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (start) start_cyc <= cyc;
    if (rst_n && acc_prev !== out_valid) begin failures++; $display("FAIL latency"); end
    if (out_valid) begin
      int e;
      real ex;
      e  = exp_y.pop_front();
      ex = exact_y.pop_front();
      ysum += real'(y) / 256.0;
      checks += 2;
      if (int'(y) != e) begin failures++; $display("FAIL y=%0d exp=%0d", y, e); end
      if (absr(real'(y) / 256.0 - ex) > 0.15) begin
        failures++; $display("FAIL accuracy y=%0d exact=%f", y, ex);
      end
    end
    if (done) begin
      checks++;
      done_seen++;
      if (cyc - start_cyc != 3 * n_cur + 1) begin
        failures++; $display("FAIL done after %0d clocks, n=%0d", cyc - start_cyc, n_cur);
      end
    end
    acc_prev = in_valid && in_ready && pass == PASS_OUT && !start;
  end

  task automatic stream(int n, int vec[128]);
    for (int i = 0; i < n; i++) begin in_valid = 1; x = 8'(vec[i]); @(negedge clk); end
    in_valid = 0;
  endtask

  task automatic run_vector(sm_size_e sz, int spread, int kind);
    int n, vec[128], m, sum, l;
    real den;
    n = sm_len(sz);
    for (int i = 0; i < n; i++) begin
      vec[i] = int'($urandom_range(2 * spread, 0)) - spread;
      if (vec[i] > 127) vec[i] = 127;
      if (vec[i] < -128) vec[i] = -128;
      if (kind == 1) vec[i] = 20;                         // constant vector
      if (kind == 2) vec[i] = (i == n / 2) ? 100 : -100;  // one dominant element
    end
    // model
    m = -128;
    for (int i = 0; i < n; i++) if (vec[i] > m) m = vec[i];
    sum = 0;
    den = 0.0;
    for (int i = 0; i < n; i++) begin
      sum += pow2_ref(real'(vec[i] - m) / 16.0, 8);
      den += 2.0 ** (real'(vec[i]) / 16.0);
    end
    l = log2_ref(sum, 8, 4);
    for (int i = 0; i < n; i++) begin
      exp_y.push_back(pow2_ref(real'(vec[i] - m - l) / 16.0, 8));
      exact_y.push_back((2.0 ** (real'(vec[i]) / 16.0)) / den);
    end
    ysum = 0.0;
    @(negedge clk); start = 1; size = sz; n_cur = n;
    @(negedge clk); start = 0;
    stream(n, vec);   // max pass
    stream(n, vec);   // sum pass
    stream(n, vec);   // output pass
    @(negedge clk);
    checks++;
    if (ysum < 0.8 || ysum > 1.2) begin failures++; $display("FAIL output sum %f", ysum); end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      sm_size_e sizes[3] = '{SM_N10, SM_N32, SM_N128};
      int spreads[4] = '{8, 32, 64, 128};
      run_vector(sizes[t % 3], spreads[(t / 3) % 4], 0);
    end
    run_vector(SM_N10, 0, 1);
    run_vector(SM_N128, 0, 1);
    run_vector(SM_N32, 0, 2);
    checks++;
    if (done_seen != 63 || exp_y.size() != 0) begin failures++; $display("FAIL done count %0d", done_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
