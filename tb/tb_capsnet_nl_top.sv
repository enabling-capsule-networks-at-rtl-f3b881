// End-to-end testbench for capsnet_nl_top at its default parameters
// (softmax-b2 and squash-exp). A softmax process and a squash process drive
// the two streams at the same time, as in dynamic routing, where coupling
// coefficients and capsule activations alternate. Every output is checked
// against the real-valued models, with its one-clock latency.
// Mechanisms that must each occur at least once (counted, a failure if not):
// every softmax length (10/32/128), every squash length (4/8/16/32), the
// exponential branch and the table branch of the squashing coefficient, the
// low and high square-root tables, norm saturation, a softmax output flushed
// to zero and a restart of each unit in mid-vector.
module tb_capsnet_nl_top;
  import capsnet_nl_pkg::*;
  import capsnet_ref_pkg::*;

  logic clk = 0, rst_n = 1;
  logic sm_start = 0, sm_in_valid = 0, sq_start = 0, sq_in_valid = 0;
  sm_size_e sm_size = SM_N10;
  sq_size_e sq_size = SQ_N4;
  logic [7:0] sm_x = 0, sq_x = 0;
  logic sm_in_ready, sm_out_valid, sm_done, sq_in_ready, sq_out_valid, sq_done;
  pass_e sm_pass, sq_pass;
  logic [8:0] sm_y;
  logic [7:0] sq_y, sq_norm;
  int checks = 0, failures = 0;

  capsnet_nl_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #30000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int sm_len_seen[3], sq_len_seen[4];
  int br_exp = 0, br_lut = 0, tab_lo = 0, tab_hi = 0, norm_sat = 0;
  int sm_flush = 0, sm_restart = 0, sq_restart = 0;

  int sm_exp[$], sq_exp[$];
  bit sm_acc = 0, sq_acc = 0;

  always @(posedge clk) if (rst_n) begin
    if (sm_acc !== sm_out_valid) begin failures++; $display("FAIL softmax latency"); end
    if (sq_acc !== sq_out_valid) begin failures++; $display("FAIL squash latency"); end
    if (sm_out_valid) begin
      int e;
      e = sm_exp.pop_front();
      checks++;
      if (int'(sm_y) != e) begin failures++; $display("FAIL softmax y=%0d exp=%0d", sm_y, e); end
    end
    if (sq_out_valid) begin
      int e;
      e = sq_exp.pop_front();
      checks++;
      if (int'($signed(sq_y)) != e) begin failures++; $display("FAIL squash y=%0d exp=%0d", $signed(sq_y), e); end
    end
    sm_acc = sm_in_valid && sm_in_ready && sm_pass == PASS_OUT && !sm_start;
    sq_acc = sq_in_valid && sq_in_ready && sq_pass == PASS_OUT && !sq_start;
  end

  // ---------------- softmax stream ----------------
  task automatic sm_vector(int szi, int spread, int abort_after);
    sm_size_e sz;
    int n, vec[128], m, sum, l, k;
    sz = sm_size_e'(szi);
    n = sm_len(sz);
    for (int i = 0; i < n; i++) begin
      vec[i] = int'($urandom_range(2 * spread, 0)) - spread;
      if (vec[i] > 127) vec[i] = 127;
    end
    m = -128;
    for (int i = 0; i < n; i++) if (vec[i] > m) m = vec[i];
    sum = 0;
    for (int i = 0; i < n; i++) sum += pow2_ref(real'(vec[i] - m) / 16.0, 8);
    l = log2_ref(sum, 8, 4);
    @(negedge clk); sm_start = 1; sm_size = sz;
    @(negedge clk); sm_start = 0;
    k = 0;
    for (int p = 0; p < 3; p++)
      for (int i = 0; i < n; i++) begin
        if (abort_after >= 0 && k == abort_after) begin
          sm_in_valid = 0;
          sm_restart++;
          return;                       // caller starts a new vector at once
        end
        if (p == 2) begin
          int e;
          e = pow2_ref(real'(vec[i] - m - l) / 16.0, 8);
          sm_exp.push_back(e);
          if (e == 0) sm_flush++;
        end
        sm_in_valid = 1; sm_x = 8'(vec[i]); @(negedge clk);
        k++;
      end
    sm_in_valid = 0;
    checks++;
    if (sm_done !== 1'b1) begin failures++; $display("FAIL softmax done"); end
    sm_len_seen[szi]++;
  endtask

  // ---------------- squash stream ----------------
  task automatic sq_vector(int szi, int amp, int abort_after);
    sq_size_e sz;
    int n, vec[32], nc, c;
    longint s = 0;
    sz = sq_size_e'(szi);
    n = sq_len(sz);
    for (int i = 0; i < n; i++) begin
      vec[i] = int'($urandom_range(2 * amp, 0)) - amp;
      if (vec[i] > 127) vec[i] = 127;
      s += vec[i] * vec[i];
    end
    nc = sqrt_ref(s);
    c  = coef_ref(nc, 1'b0);
    @(negedge clk); sq_start = 1; sq_size = sz;
    @(negedge clk); sq_start = 0;
    for (int i = 0; i < n; i++) begin
      if (abort_after >= 0 && i == abort_after) begin
        sq_in_valid = 0;
        sq_restart++;
        return;
      end
      sq_in_valid = 1; sq_x = 8'(vec[i]); @(negedge clk);
    end
    sq_in_valid = 0;
    while (!sq_in_ready) @(negedge clk);
    checks++;
    if (int'(sq_norm) != nc) begin failures++; $display("FAIL squash norm %0d exp %0d", sq_norm, nc); end
    if (s < 4096) tab_lo++; else if (s < 65536) tab_hi++; else norm_sat++;
    if (nc < THR_EXP) br_exp++; else br_lut++;
    for (int i = 0; i < n; i++) begin
      int e;
      e = squash_y_ref(vec[i], c);
      sq_exp.push_back(e);
      sq_in_valid = 1; sq_x = 8'(vec[i]); @(negedge clk);
    end
    sq_in_valid = 0;
    checks++;
    if (sq_done !== 1'b1) begin failures++; $display("FAIL squash done"); end
    sq_len_seen[szi]++;
  endtask

  task automatic need(string what, int count);
    checks++;
    if (count == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
    else $display("mechanism %-22s %0d", what, count);
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin
        int spreads[4] = '{8, 32, 96, 128};
        sm_vector(1, 32, 20);            // restart during the max pass
        for (int t = 0; t < 24; t++) sm_vector(t % 3, spreads[(t / 3) % 4], -1);
        sm_vector(2, 64, 300);           // restart during the output pass
        sm_vector(2, 64, -1);
      end
      begin
        int amps[5] = '{2, 6, 16, 40, 128};
        sq_vector(3, 16, 5);             // restart during the norm pass
        for (int t = 0; t < 60; t++) sq_vector(t % 4, amps[(t / 4) % 5], -1);
      end
    join
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (sm_exp.size() != 0 || sq_exp.size() != 0) begin failures++; $display("FAIL outputs missing"); end
    need("softmax n=10", sm_len_seen[0]);
    need("softmax n=32", sm_len_seen[1]);
    need("softmax n=128", sm_len_seen[2]);
    need("squash n=4", sq_len_seen[0]);
    need("squash n=8", sq_len_seen[1]);
    need("squash n=16", sq_len_seen[2]);
    need("squash n=32", sq_len_seen[3]);
    need("coef exp branch", br_exp);
    need("coef table branch", br_lut);
    need("sqrt low table", tab_lo);
    need("sqrt high table", tab_hi);
    need("norm saturation", norm_sat);
    need("softmax flush to 0", sm_flush);
    need("softmax restart", sm_restart);
    need("squash restart", sq_restart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
