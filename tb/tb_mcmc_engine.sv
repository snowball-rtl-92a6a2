// tb_mcmc_engine: self-checking test of the dual-mode MCMC engine.
// Memories are modelled in the testbench. At T = 0 the flip probabilities are
// exactly 1, 1/2 or 0, so the testbench can predict every decision from the
// stateless random function and its own prefix sums:
//   * Mode I: site j = floor(u N / 2^32), accept iff v[31:16] < p_j.
//   * Mode II: W = sum p_i, r = floor(v W / 2^32), the first j whose running
//     sum exceeds r; W = 0 falls back to Mode I; uniformized draws r over
//     [0, N * 65536) and reports a null transition when r >= W.
// Also checks the reciprocal of the annealing temperature, the latency of
// both modes, padding spins beyond N never being chosen, and, at T = 1 on 8
// spins with known energy changes, that over 4000 iterations Mode II picks
// each spin with frequency p_j / W and Mode I accepts with probability p_j
// (within four standard deviations, p_j from the real-valued logistic).
module tb_mcmc_engine;
  import snowball_pkg::*;
  localparam int N_MAX = 256, LANES = 64, K_MAX = 8, W_MAX = N_MAX / LANES;
  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic uniformize;
  logic [8:0] n_spins;
  logic [2:0] n_words;
  logic [63:0] seed;
  logic sched_we;
  logic [2:0] sched_addr;
  logic [31:0] sched_data;
  logic start, busy, done;
  logic [15:0] stage;
  logic [31:0] iter;
  step_result_t result;
  logic [1:0] rd_word;
  logic [LANES-1:0][FIELD_W-1:0] uj_word, h_word;
  logic [LANES-1:0] spin_word;

  int uj [N_MAX];
  int hh [N_MAX];
  logic [N_MAX-1:0] x;
  int checks = 0, failures = 0;
  int n_fallback = 0, n_null = 0, n_rw = 0, n_rs = 0;

  mcmc_engine #(.N_MAX(N_MAX), .LANES(LANES), .K_MAX(K_MAX)) dut (.*);
  always #5 clk = ~clk;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      uj_word[l]   = FIELD_W'(uj[int'(rd_word) * LANES + l]);
      h_word[l]    = FIELD_W'(hh[int'(rd_word) * LANES + l]);
      spin_word[l] = x[int'(rd_word) * LANES + l];
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // exact T = 0 probability of spin i, Q1.16
  function automatic int p0(input int i);
    longint de;
    de = 2 * (longint'(uj[i]) + longint'(hh[i])) * (x[i] ? 1 : -1);
    return (de < 0) ? 65536 : (de == 0) ? 32768 : 0;
  endfunction

  task automatic run_step(input int k, input int t, output int cyc);
    @(negedge clk);
    stage = 16'(k); iter = 32'(t); start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic load_sched(input int a, input int tv);
    @(negedge clk) sched_we = 1; sched_addr = 3'(a); sched_data = 32'(tv);
    @(negedge clk) sched_we = 0;
  endtask

  task automatic randomize_state(input int n, input bit all_uphill);
    for (int i = 0; i < N_MAX; i++) begin
      x[i]  = 1'($urandom);
      uj[i] = int'($urandom_range(0, 6)) - 3;
      hh[i] = int'($urandom_range(0, 4)) - 2;
      if (all_uphill) begin
        // make dE = 2 s u > 0 for every spin
        uj[i] = (x[i] ? 1 : -1) * int'($urandom_range(1, 50));
        hh[i] = 0;
      end
    end
  endtask

  // expected Mode I decision at T = 0
  task automatic expect_rs(input int k, input int t, input int n, input bit fb);
    logic [31:0] u, v;
    int j;
    bit acc;
    u = stateless_rand(seed, 16'(k), 32'(t), SALT_SITE);
    v = stateless_rand(seed, 16'(k), 32'(t), SALT_ACCEPT);
    j = int'((longint'(u) * longint'(n)) >> 32);
    acc = int'(v[31:16]) < p0(j);
    check(result.idx == 32'(j), $sformatf("RS idx got %0d exp %0d", result.idx, j));
    check(result.flip == acc, $sformatf("RS accept got %0b exp %0b", result.flip, acc));
    check(result.s_old == x[j], "RS s_old");
    check(result.fallback == fb, "RS fallback flag");
  endtask

  initial begin
    int cyc, n, wtot, r, acc_sum, j, accepts;
    logic [31:0] v;
    longint range_v;
    mode = MODE_RANDOM_SCAN; uniformize = 0; n_spins = 9'd200; n_words = 3'd4;
    seed = 64'hC0FFEE_1234_5678; sched_we = 0; sched_addr = '0; sched_data = '0;
    start = 0; stage = '0; iter = '0;
    for (int i = 0; i < N_MAX; i++) begin uj[i] = 0; hh[i] = 0; end
    x = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_sched(0, 0);               // stage 0: T = 0
    load_sched(1, 65536);           // stage 1: T = 1.0
    load_sched(2, 229376);          // stage 2: T = 3.5
    load_sched(3, 1);               // stage 3: T = 2^-16 (saturating 1/T)

    // ---- reciprocal of T ----
    run_step(1, 0, cyc);
    check(dut.inv_t == 32'd65536 && !dut.t_zero, "1/T for T = 1.0");
    check(cyc == 2 + 35, $sformatf("stage change latency %0d", cyc));
    run_step(2, 1, cyc);
    check(dut.inv_t == 32'd18724, $sformatf("1/T for T = 3.5 got %0d", dut.inv_t));
    run_step(3, 2, cyc);
    check(dut.inv_t == 32'hFFFF_FFFF, "1/T saturates");
    run_step(0, 3, cyc);
    check(dut.t_zero, "T = 0 flagged");

    // ---- Mode I at T = 0, exact ----
    n = 200;
    for (int t = 0; t < 300; t++) begin
      randomize_state(n, 0);
      run_step(0, 1000 + t, cyc);
      check(cyc == 2, $sformatf("Mode I latency %0d", cyc));
      expect_rs(0, 1000 + t, n, 0);
      n_rs++;
    end

    // ---- Mode II at T = 0, exact ----
    mode = MODE_ROULETTE;
    for (int t = 0; t < 300; t++) begin
      randomize_state(n, (t % 10) == 0);
      uniformize = (t % 3) == 2;
      run_step(0, 5000 + t, cyc);
      wtot = 0;
      for (int i = 0; i < n; i++) wtot += p0(i);
      v = stateless_rand(seed, 16'(0), 32'(5000 + t), SALT_ROULETTE);
      range_v = uniformize ? longint'(n) * 65536 : longint'(wtot);
      r = int'((longint'(v) * range_v) >> 32);
      check(cyc <= 2 * 4 + 4, $sformatf("Mode II latency %0d", cyc));
      if (wtot == 0 && !uniformize) begin
        expect_rs(0, 5000 + t, n, 1);
        n_fallback++;
      end else if (r >= wtot) begin
        check(result.null_move && !result.flip, "uniformized null transition");
        n_null++;
      end else begin
        acc_sum = 0; j = -1;
        for (int i = 0; i < n && j < 0; i++) begin
          acc_sum += p0(i);
          if (acc_sum > r) j = i;
        end
        check(result.flip && !result.null_move && !result.fallback, "Mode II flips");
        check(result.idx == 32'(j), $sformatf("Mode II idx got %0d exp %0d (W=%0d r=%0d)", result.idx, j, wtot, r));
        check(result.s_old == x[j], "Mode II s_old");
        check(j < n, "padding spin never chosen");
        n_rw++;
      end
    end
    check(n_fallback > 0, "fallback exercised");
    check(n_null > 0, "null transition exercised");

    // ---- Mode I at T = 1 with dE = 0: acceptance near 1/2 ----
    mode = MODE_RANDOM_SCAN; uniformize = 0;
    for (int i = 0; i < N_MAX; i++) begin uj[i] = 0; hh[i] = 0; end
    accepts = 0;
    for (int t = 0; t < 1000; t++) begin
      run_step(1, 9000 + t, cyc);
      accepts += result.flip;
    end
    check(accepts > 440 && accepts < 560, $sformatf("acceptance at dE = 0: %0d / 1000", accepts));

    // ---- T = 1, 8 spins with dE = -4, -2, 0, 0, 2, 2, 4, 6: statistics ----
    // Mode II must pick spin j with frequency p_j / W, Mode I must accept
    // with probability p_j, where p_j = 1 / (1 + e^dE_j) (real-valued).
    begin
      int  ujs [8] = '{-2, -1, 0, 0, 1, 1, 2, 3};
      int  hist [8];
      real pr [8];
      real wsum_r, e, ev, pexp;
      int  steps;
      steps = 4000;
      n_spins = 9'd8; n_words = 3'd1;
      for (int i = 0; i < N_MAX; i++) begin uj[i] = 0; hh[i] = 0; end
      x = '0;
      wsum_r = 0.0;
      for (int i = 0; i < 8; i++) begin
        x[i] = 1'b1; uj[i] = ujs[i]; hist[i] = 0;
        pr[i] = 1.0 / (1.0 + $exp(2.0 * real'(ujs[i])));
        wsum_r += pr[i];
      end
      mode = MODE_ROULETTE;
      for (int t = 0; t < steps; t++) begin
        run_step(1, 20000 + t, cyc);
        if (result.flip && result.idx < 8) hist[result.idx]++;
        else check(0, "Mode II at T = 1 chose no valid spin");
      end
      for (int i = 0; i < 8; i++) begin
        e = real'(steps) * pr[i] / wsum_r;
        check(rabs(real'(hist[i]) - e) <= 4.0 * $sqrt(e) + 3.0,
              $sformatf("Mode II frequency of spin %0d: %0d, expected %0.1f", i, hist[i], e));
      end
      mode = MODE_RANDOM_SCAN;
      accepts = 0; pexp = 0.0; ev = 0.0;
      for (int t = 0; t < steps; t++) begin
        run_step(1, 40000 + t, cyc);
        accepts += result.flip;
        pexp += pr[result.idx];
        ev   += pr[result.idx] * (1.0 - pr[result.idx]);
      end
      check(rabs(real'(accepts) - pexp) <= 4.0 * $sqrt(ev) + 3.0,
            $sformatf("Mode I acceptances at T = 1: %0d, expected %0.1f", accepts, pexp));
      $display("INFO T = 1 roulette histogram %p, random-scan accepts %0d (expected %0.1f)", hist, accepts, pexp);
    end
    $display("INFO rs=%0d rw=%0d fallback=%0d null=%0d", n_rs, n_rw, n_fallback, n_null);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
