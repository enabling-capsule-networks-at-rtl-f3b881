// Testbench for squash: a squash-exp and a squash-pow2 instance receive the
// same stream of random capsule vectors of 4, 8, 16 and 32 components (norms
// from about 0.1 to beyond the table range). Each vector is streamed twice
// (norm pass, output pass). Checks every output and the latched norm against
// the real-valued model, that each output appears exactly one clock after its
// input is accepted, that `done` is registered 2n+1 clocks after the `start` edge, and that the
// outputs stay close to the exact squash while the norm is below 4.
module tb_squash;
  import capsnet_nl_pkg::*;
  import capsnet_ref_pkg::*;

  logic clk = 0, rst_n = 1, start = 0, in_valid = 0;
  sq_size_e size = SQ_N4;
  logic [7:0] x = 0;
  logic       rdy[2], ov[2], dn[2];
  pass_e      ps[2];
  logic [7:0] y[2], nrm[2];
  int checks = 0, failures = 0;

  squash #(.VARIANT(SQUASH_EXP)) dut_exp (
    .clk, .rst_n, .start, .size, .in_valid, .x, .in_ready(rdy[0]), .pass(ps[0]),
    .out_valid(ov[0]), .y(y[0]), .norm(nrm[0]), .done(dn[0]));
  squash #(.VARIANT(SQUASH_POW2)) dut_pow2 (
    .clk, .rst_n, .start, .size, .in_valid, .x, .in_ready(rdy[1]), .pass(ps[1]),
    .out_valid(ov[1]), .y(y[1]), .norm(nrm[1]), .done(dn[1]));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected outputs of the current vector, per variant
  int exp_y[2][$];
  int exp_norm;
  int cyc = 0, start_cyc = 0, n_cur = 0;
  bit acc_prev[2] = '{0, 0};
  int done_seen = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (start) start_cyc <= cyc;
    for (int v = 0; v < 2; v++) begin
      // output of an input accepted on the previous edge
      if (rst_n && acc_prev[v] !== ov[v]) begin
        failures++; $display("FAIL latency variant %0d", v);
      end
      if (ov[v]) begin
        int e;
        checks++;
        e = exp_y[v].pop_front();
        if (int'($signed(y[v])) != e) begin
          failures++; $display("FAIL variant %0d y=%0d exp=%0d", v, $signed(y[v]), e);
        end
      end
      if (dn[v]) begin
        checks++;
        done_seen++;
        if (cyc - start_cyc != 2 * n_cur + 2) begin
          failures++; $display("FAIL done after %0d clocks, n=%0d", cyc - start_cyc, n_cur);
        end
      end
      acc_prev[v] = in_valid && rdy[v] && ps[v] == PASS_OUT && !start;
    end
  end

  task automatic run_vector(sq_size_e sz, int amp);
    int n, vec[32], nc;
    longint s = 0;
    real ex_norm;
    n = sq_len(sz);
    for (int i = 0; i < n; i++) begin
      vec[i] = int'($urandom_range(2 * amp, 0)) - amp;
      if (vec[i] > 127) vec[i] = 127;
      s += vec[i] * vec[i];
    end
    nc = sqrt_ref(s);
    ex_norm = $sqrt(real'(s)) / 32.0;
    for (int v = 0; v < 2; v++)
      for (int i = 0; i < n; i++) exp_y[v].push_back(squash_y_ref(vec[i], coef_ref(nc, v[0])));
    @(negedge clk); start = 1; size = sz; n_cur = n;
    @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin in_valid = 1; x = 8'(vec[i]); @(negedge clk); end
    in_valid = 0;
    while (!rdy[0]) @(negedge clk);
    checks += 2;
    if (int'(nrm[0]) != nc || int'(nrm[1]) != nc) begin
      failures++; $display("FAIL norm %0d/%0d exp %0d", nrm[0], nrm[1], nc);
    end
    for (int i = 0; i < n; i++) begin
      in_valid = 1; x = 8'(vec[i]); @(negedge clk);
      // accuracy against the exact squash while the norm is inside the table range
      if (ex_norm < 4.0 && ex_norm > 0.0) begin
        real ey;
        ey = exact_coef(ex_norm) * real'(vec[i]) / 32.0;
        checks++;
        if (absr(real'($signed(y[0])) / 128.0 - ey) > 0.12) begin
          failures++; $display("FAIL exp accuracy x=%0d y=%0d exact=%f norm=%f", vec[i], $signed(y[0]), ey, ex_norm);
        end
      end
    end
    in_valid = 0;
    @(negedge clk);
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 160; t++) begin
      sq_size_e sizes[4] = '{SQ_N4, SQ_N8, SQ_N16, SQ_N32};
      int amps[5] = '{2, 6, 16, 40, 128};
      run_vector(sizes[t % 4], amps[(t / 4) % 5]);
    end
    checks++;
    if (done_seen != 320 || exp_y[0].size() != 0 || exp_y[1].size() != 0) begin
      failures++; $display("FAIL done count %0d", done_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
