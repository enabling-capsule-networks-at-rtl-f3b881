// Workload testbench: dynamic routing of a ShallowCaps-sized class-capsule
// layer on capsnet_nl_top (default parameters). 1152 primary capsules predict
// 10 class capsules of 16 dimensions; three routing iterations, each with
// 1152 ten-way softmaxes (routing logits -> coupling coefficients) and 10
// squashes of 16-component vectors. The testbench does the multiply-accumulate
// work the accelerator around these units would do (weighted sums and
// agreements, in real arithmetic) and uses the DUT for every softmax and
// squash, checking each DUT output bit for bit against the reference models.
//
// The predictions are synthetic: class TARGET's predictions share a common
// direction, the others are noise. Weighted sums are divided by N_IN/N_CLS so
// that they fit the Q3.5 squash input, and logits are kept in Q4.4 with
// saturation. At the end the class with the longest output capsule must be
// TARGET, and must equal the winner of the same routing done with the exact
// e-based softmax and exact squash in floating point.
module tb_workload_routing;
  import capsnet_nl_pkg::*;
  import capsnet_ref_pkg::*;

  localparam int N_IN = 1152, N_CLS = 10, DIM = 16, ITERS = 3, TARGET = 3;

  logic clk = 0, rst_n = 1;
  logic sm_start = 0, sm_in_valid = 0, sq_start = 0, sq_in_valid = 0;
  sm_size_e sm_size = SM_N10;
  sq_size_e sq_size = SQ_N16;
  logic [7:0] sm_x = 0, sq_x = 0;
  logic sm_in_ready, sm_out_valid, sm_done, sq_in_ready, sq_out_valid, sq_done;
  pass_e sm_pass, sq_pass;
  logic [8:0] sm_y;
  logic [7:0] sq_y, sq_norm;
  int checks = 0, failures = 0;

  capsnet_nl_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real u_hat[N_IN][N_CLS][DIM];
  int  b_q[N_IN][N_CLS];        // hardware path logits, Q4.4 codes
  real b_f[N_IN][N_CLS];        // floating-point reference logits
  int  c_q[N_IN][N_CLS];        // coupling coefficients, 8 fraction bits
  real c_f[N_IN][N_CLS];        // floating-point coupling coefficients
  int  v_q[N_CLS][DIM];         // class capsules, Q1.7 codes
  real v_f[N_CLS][DIM];

  int sm_out[$], sq_out[$];
  always @(posedge clk) begin
    if (rst_n && sm_out_valid) sm_out.push_back(int'(sm_y));
    if (rst_n && sq_out_valid) sq_out.push_back(int'($signed(sq_y)));
  end

  function automatic int sat(int v, int lo, int hi);
    return (v < lo) ? lo : (v > hi) ? hi : v;
  endfunction

  task automatic hw_softmax(int i);
    int m, sum, l;
    @(negedge clk); sm_start = 1; sm_size = SM_N10;
    @(negedge clk); sm_start = 0;
    repeat (3)
      for (int j = 0; j < N_CLS; j++) begin sm_in_valid = 1; sm_x = 8'(b_q[i][j]); @(negedge clk); end
    sm_in_valid = 0;
    @(negedge clk);
    m = -128;
    for (int j = 0; j < N_CLS; j++) if (b_q[i][j] > m) m = b_q[i][j];
    sum = 0;
    for (int j = 0; j < N_CLS; j++) sum += pow2_ref(real'(b_q[i][j] - m) / 16.0, 8);
    l = log2_ref(sum, 8, 4);
    for (int j = 0; j < N_CLS; j++) begin
      int e;
      e = pow2_ref(real'(b_q[i][j] - m - l) / 16.0, 8);
      c_q[i][j] = sm_out.pop_front();
      checks++;
      if (c_q[i][j] != e) begin failures++; $display("FAIL softmax i=%0d j=%0d", i, j); end
    end
  endtask

  task automatic hw_squash(int j, int s_code[DIM]);
    longint s2 = 0;
    int c;
    for (int d = 0; d < DIM; d++) s2 += s_code[d] * s_code[d];
    c = coef_ref(sqrt_ref(s2), 1'b0);
    @(negedge clk); sq_start = 1; sq_size = SQ_N16;
    @(negedge clk); sq_start = 0;
    repeat (2) begin
      for (int d = 0; d < DIM; d++) begin sq_in_valid = 1; sq_x = 8'(s_code[d]); @(negedge clk); end
      sq_in_valid = 0;
      while (!sq_in_ready && sq_pass != PASS_IDLE) @(negedge clk);
    end
    @(negedge clk);
    for (int d = 0; d < DIM; d++) begin
      v_q[j][d] = sq_out.pop_front();
      checks++;
      if (v_q[j][d] != squash_y_ref(s_code[d], c)) begin failures++; $display("FAIL squash j=%0d d=%0d", j, d); end
    end
  endtask

  initial begin
    real dir[DIM], scale;
    int win_q, win_f;
    real best_q, best_f;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // synthetic predictions
    for (int d = 0; d < DIM; d++) dir[d] = (real'($urandom_range(200, 0)) - 100.0) / 100.0;
    for (int i = 0; i < N_IN; i++)
      for (int j = 0; j < N_CLS; j++)
        for (int d = 0; d < DIM; d++) begin
          real noise;
          noise = (real'($urandom_range(200, 0)) - 100.0) / 100.0;
          u_hat[i][j][d] = (j == TARGET) ? 0.5 * dir[d] + 0.15 * noise : 0.6 * noise;
        end
    for (int i = 0; i < N_IN; i++)
      for (int j = 0; j < N_CLS; j++) begin b_q[i][j] = 0; b_f[i][j] = 0.0; end
    scale = real'(N_CLS) / real'(N_IN);

    for (int it = 0; it < ITERS; it++) begin
      // coupling coefficients
      for (int i = 0; i < N_IN; i++) begin
        real den;
        hw_softmax(i);
        den = 0.0;
        for (int j = 0; j < N_CLS; j++) den += $exp(b_f[i][j]);
        for (int j = 0; j < N_CLS; j++) c_f[i][j] = $exp(b_f[i][j]) / den;
      end
      // weighted sums and squash
      for (int j = 0; j < N_CLS; j++) begin
        int  s_code[DIM];
        real sf[DIM], n2, k;
        n2 = 0.0;
        for (int d = 0; d < DIM; d++) begin
          real acc_q, acc_f;
          acc_q = 0.0; acc_f = 0.0;
          for (int i = 0; i < N_IN; i++) begin
            acc_q += real'(c_q[i][j]) / 256.0 * u_hat[i][j][d];
            acc_f += c_f[i][j] * u_hat[i][j][d];
          end
          s_code[d] = sat(int'($floor(acc_q * scale * 32.0 + 0.5)), -128, 127);
          sf[d] = acc_f * scale;
          n2 += sf[d] * sf[d];
        end
        hw_squash(j, s_code);
        k = n2 / (1.0 + n2) / $sqrt(n2 + 1e-30);
        for (int d = 0; d < DIM; d++) v_f[j][d] = k * sf[d];
      end
      // agreement
      if (it != ITERS - 1)
        for (int i = 0; i < N_IN; i++)
          for (int j = 0; j < N_CLS; j++) begin
            real aq, af;
            aq = 0.0; af = 0.0;
            for (int d = 0; d < DIM; d++) begin
              aq += u_hat[i][j][d] * real'(v_q[j][d]) / 128.0;
              af += u_hat[i][j][d] * v_f[j][d];
            end
            b_q[i][j] = sat(b_q[i][j] + int'($floor(aq * 16.0 + 0.5)), -128, 127);
            b_f[i][j] += af;
          end
    end

    // classification
    best_q = -1.0; best_f = -1.0; win_q = -1; win_f = -1;
    for (int j = 0; j < N_CLS; j++) begin
      real lq, lf;
      lq = 0.0; lf = 0.0;
      for (int d = 0; d < DIM; d++) begin
        lq += (real'(v_q[j][d]) / 128.0) ** 2;
        lf += v_f[j][d] ** 2;
      end
      $display("class %0d: |v| hardware %f  float %f", j, $sqrt(lq), $sqrt(lf));
      if (lq > best_q) begin best_q = lq; win_q = j; end
      if (lf > best_f) begin best_f = lf; win_f = j; end
    end
    checks += 2;
    if (win_q != TARGET) begin failures++; $display("FAIL hardware routing picked class %0d", win_q); end
    if (win_q != win_f)  begin failures++; $display("FAIL hardware %0d and float %0d routing disagree", win_q, win_f); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
