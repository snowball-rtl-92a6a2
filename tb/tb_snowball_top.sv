// tb_snowball_top: end-to-end test of the Snowball kernel at reduced size.
//
// A random problem (symmetric even couplings on B = 3 planes, odd biases so
// that no local field is ever zero) is loaded into the off-chip memory model,
// the biases and the initial spins are loaded through the host ports, and
// the kernel is run several times:
//   A. initialisation only: every u_i^(J) is compared with sum_{j!=i} J_ij s_j;
//   B. Mode I (random-scan) at T = 0 over two stages;
//   C. Mode II (roulette-wheel) at T = 0, long enough to reach a local
//      minimum, where the total weight W becomes 0 and the engine falls back
//      to random-scan;
//   D. uniformized Mode II at T = 0 (null transitions);
//   E. Mode II with a cooling schedule at T > 0.
// For B, C and D the testbench runs its own model of the algorithm (exact at
// T = 0, using the same stateless random function) and compares the final
// spin configuration bit for bit. After every run the stored fields must
// equal a from-scratch recomputation for the final spins, and the event
// counters must add up to the number of iterations. Each mechanism (flip,
// rejection, fallback, null transition, stage change, memory stall, request
// back-pressure) is counted and must occur at least once.
module tb_snowball_top;
  import snowball_pkg::*;
  localparam int N_MAX = 256, LANES = 64, B_MAX = 4, K_MAX = 16;
  localparam int N = 200, NP = 3, NW = (N + LANES - 1) / LANES;

  logic clk = 0, rst_n = 0;
  logic [8:0]  cfg_n_spins;
  logic [2:0]  cfg_n_planes;
  logic        cfg_mode, cfg_uniformize;
  logic [15:0] cfg_n_stages;
  logic [31:0] cfg_iters_per_stage;
  logic [63:0] cfg_seed;
  logic        h_we, spin_we, sched_we, start, busy, done;
  logic [7:0]  h_addr;
  logic signed [31:0] h_data;
  logic [1:0]  spin_waddr, s_out_addr;
  logic [63:0] spin_wdata, s_out_data;
  logic [3:0]  sched_addr;
  logic [31:0] sched_data;
  logic        mem_req_valid, mem_req_ready, mem_req_col, mem_rd_valid, mem_rd_ready;
  logic [7:0]  mem_req_idx, fld_out_addr;
  logic [63:0] mem_rd_data;
  logic signed [31:0] fld_out_data, bias_out_data;
  logic [31:0] stat_flips, stat_rejects, stat_fallbacks, stat_nulls, stat_cycles;

  snowball_top #(.N_MAX(N_MAX), .LANES(LANES), .B_MAX(B_MAX), .K_MAX(K_MAX)) dut (.*);

  coupler_mem_model #(.N_MAX(N_MAX), .LANES(LANES), .STALL_PCT(20)) mem (
    .clk, .rst_n, .n_planes(NP), .n_words(NW),
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_col(mem_req_col),
    .req_idx(mem_req_idx), .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready),
    .rd_data(mem_rd_data)
  );

  always #5 clk = ~clk;

  int jm [N][N];
  int hv [N];
  bit xs [N];          // reference spins
  int checks = 0, failures = 0;
  int ev_flip = 0, ev_reject = 0, ev_fallback = 0, ev_null = 0, ev_stage = 0, ev_backpressure = 0;

  always @(posedge clk) if (mem_req_valid && !mem_req_ready) ev_backpressure++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint uref(input int i);
    longint u;
    u = hv[i];
    for (int j = 0; j < N; j++) if (j != i) u += longint'(jm[i][j]) * (xs[j] ? 1 : -1);
    return u;
  endfunction

  function automatic longint energy();
    longint e;
    e = 0;
    for (int i = 0; i < N; i++) begin
      for (int j = i + 1; j < N; j++)
        e -= longint'(jm[i][j]) * (xs[i] ? 1 : -1) * (xs[j] ? 1 : -1);
      e -= longint'(hv[i]) * (xs[i] ? 1 : -1);
    end
    return e;
  endfunction

  function automatic int p0(input int i);
    longint de;
    de = 2 * uref(i) * (xs[i] ? 1 : -1);
    return (de < 0) ? 65536 : (de == 0) ? 32768 : 0;
  endfunction

  // one iteration of the reference algorithm at T = 0
  task automatic ref_step(input int mode, input bit unif, input int k, input int t);
    logic [31:0] u, v;
    int j, wtot, r, acc;
    longint range_v;
    bit do_rs;
    do_rs = (mode == 0);
    if (mode == 1) begin
      wtot = 0;
      for (int i = 0; i < N; i++) wtot += p0(i);
      if (wtot == 0 && !unif) do_rs = 1;
      else begin
        v = stateless_rand(cfg_seed, 16'(k), 32'(t), SALT_ROULETTE);
        range_v = unif ? longint'(N) * 65536 : longint'(wtot);
        r = int'((longint'(v) * range_v) >> 32);
        if (r < wtot) begin
          acc = 0; j = -1;
          for (int i = 0; i < N && j < 0; i++) begin
            acc += p0(i);
            if (acc > r) j = i;
          end
          xs[j] = !xs[j];
        end
      end
    end
    if (do_rs) begin
      u = stateless_rand(cfg_seed, 16'(k), 32'(t), SALT_SITE);
      v = stateless_rand(cfg_seed, 16'(k), 32'(t), SALT_ACCEPT);
      j = int'((longint'(u) * longint'(N)) >> 32);
      if (int'(v[31:16]) < p0(j)) xs[j] = !xs[j];
    end
  endtask

  task automatic load_spins();
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      spin_we = 1; spin_waddr = 2'(w);
      for (int l = 0; l < LANES; l++) spin_wdata[l] = (w * LANES + l < N) ? xs[w * LANES + l] : 1'b0;
    end
    @(negedge clk) spin_we = 0;
  endtask

  task automatic run_kernel(input int mode, input bit unif, input int stages, input int iters);
    cfg_mode = 1'(mode); cfg_uniformize = unif;
    cfg_n_stages = 16'(stages); cfg_iters_per_stage = 32'(iters);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    if (stages > 1) ev_stage++;
    ev_flip     += stat_flips;
    ev_reject   += stat_rejects;
    ev_fallback += stat_fallbacks;
    ev_null     += stat_nulls;
    check(stat_flips + stat_rejects + stat_nulls == 32'(stages * iters),
          $sformatf("counters add up: %0d+%0d+%0d", stat_flips, stat_rejects, stat_nulls));
    $display("INFO run mode=%0d unif=%0d: flips=%0d rejects=%0d fallbacks=%0d nulls=%0d cycles=%0d",
             mode, unif, stat_flips, stat_rejects, stat_fallbacks, stat_nulls, stat_cycles);
  endtask

  // compare DUT spins with reference spins, and DUT fields with a recomputation
  task automatic check_state(input string tag, input bit cmp_ref);
    bit dx [N];
    int bad_s, bad_f;
    bad_s = 0; bad_f = 0;
    for (int w = 0; w < NW; w++) begin
      s_out_addr = 2'(w); #1;
      for (int l = 0; l < LANES; l++) if (w * LANES + l < N) dx[w * LANES + l] = s_out_data[l];
    end
    if (cmp_ref) begin
      for (int i = 0; i < N; i++) if (dx[i] != xs[i]) bad_s++;
      check(bad_s == 0, $sformatf("%s: %0d spins differ from reference", tag, bad_s));
    end
    for (int i = 0; i < N; i++) xs[i] = dx[i];
    for (int i = 0; i < N; i++) begin
      fld_out_addr = 8'(i); #1;
      if (longint'(fld_out_data) + longint'(bias_out_data) != uref(i)) bad_f++;
    end
    check(bad_f == 0, $sformatf("%s: %0d local fields wrong", tag, bad_f));
  endtask

  initial begin
    longint e0, e1;
    int t0;
    cfg_n_spins = 9'(N); cfg_n_planes = 3'(NP); cfg_mode = 0; cfg_uniformize = 0;
    cfg_n_stages = 0; cfg_iters_per_stage = 0; cfg_seed = 64'h5A0B_A11_0000_0001;
    h_we = 0; spin_we = 0; sched_we = 0; start = 0; h_addr = '0; h_data = '0;
    spin_waddr = '0; spin_wdata = '0; sched_addr = '0; sched_data = '0;
    s_out_addr = '0; fld_out_addr = '0;
    // problem: even couplings |J| <= 6, odd biases
    for (int i = 0; i < N; i++) begin
      jm[i][i] = 0;
      for (int j = i + 1; j < N; j++) begin
        jm[i][j] = 2 * (int'($urandom_range(0, 6)) - 3);
        jm[j][i] = jm[i][j];
      end
      hv[i] = 2 * (int'($urandom_range(0, 6)) - 3) + 1;
      xs[i] = 1'($urandom);
    end
    for (int i = 0; i < N_MAX; i++)
      for (int j = 0; j < N_MAX; j++)
        mem.jm[i][j] = (i < N && j < N) ? shortint'(jm[i][j]) : 16'sd0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk) h_we = 1; h_addr = 8'(i); h_data = hv[i];
    end
    @(negedge clk) h_we = 0;
    // schedule: 0,1 -> T = 0; 2..5 -> cooling 8, 4, 2, 0.5
    for (int k = 0; k < 6; k++) begin
      @(negedge clk) sched_we = 1; sched_addr = 4'(k);
      sched_data = (k < 2) ? 0 : (k == 2) ? 8 * 65536 : (k == 3) ? 4 * 65536 : (k == 4) ? 2 * 65536 : 32768;
    end
    @(negedge clk) sched_we = 0;
    load_spins();

    // A: initialisation only
    run_kernel(0, 0, 0, 0);
    check_state("A init", 1);

    // B: Mode I, T = 0, two stages
    e0 = energy();
    run_kernel(0, 0, 2, 150);
    for (int t = 0; t < 300; t++) ref_step(0, 0, t / 150, t);
    check_state("B mode I", 1);
    e1 = energy();
    check(e1 <= e0, $sformatf("B energy did not rise (%0d -> %0d)", e0, e1));

    // C: Mode II, T = 0, to a local minimum and beyond
    e0 = energy();
    run_kernel(1, 0, 2, 200);
    for (int t = 0; t < 400; t++) ref_step(1, 0, t / 200, t);
    check_state("C mode II", 1);
    e1 = energy();
    check(e1 < e0, $sformatf("C energy fell (%0d -> %0d)", e0, e1));

    // D: uniformized Mode II at T = 0, from a fresh random start
    for (int i = 0; i < N; i++) xs[i] = 1'($urandom);
    load_spins();
    run_kernel(1, 1, 1, 150);
    for (int t = 0; t < 150; t++) ref_step(1, 1, 0, t);
    check_state("D uniformized", 1);

    // E: Mode II with cooling 8 -> 0.5 (fields consistency only)
    for (int i = 0; i < N; i++) xs[i] = 1'($urandom);
    load_spins();
    e0 = energy();
    cfg_seed = 64'h1234;
    run_kernel(1, 0, 1, 1);  // load new spins' fields
    check_state("E0", 0);
    e0 = energy();
    // stages 2..5 via a schedule copy at 0..3
    for (int k = 0; k < 4; k++) begin
      @(negedge clk) sched_we = 1; sched_addr = 4'(k);
      sched_data = (k == 0) ? 8 * 65536 : (k == 1) ? 4 * 65536 : (k == 2) ? 2 * 65536 : 32768;
    end
    @(negedge clk) sched_we = 0;
    run_kernel(1, 0, 4, 100);
    check_state("E annealing", 0);
    e1 = energy();
    check(e1 < e0, $sformatf("E energy fell (%0d -> %0d)", e0, e1));
    $display("INFO energy E %0d -> %0d", e0, e1);

    // mechanisms
    $display("INFO events: flips=%0d rejects=%0d fallbacks=%0d nulls=%0d stage_runs=%0d mem_stalls=%0d req_backpressure=%0d",
             ev_flip, ev_reject, ev_fallback, ev_null, ev_stage, mem.stalls, ev_backpressure);
    check(ev_flip > 0, "flip happened");
    check(ev_reject > 0, "random-scan rejection happened");
    check(ev_fallback > 0, "roulette fallback happened");
    check(ev_null > 0, "uniformized null transition happened");
    check(ev_stage > 0, "stage change happened");
    check(mem.stalls > 0, "memory stall happened");
    check(ev_backpressure > 0, "request back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
