// tb_snowball_k2000: full-size run of the kernel on a K2000-style Max-Cut
// instance, with every parameter of snowball_top at its default.
//
// The instance is the complete graph on 2000 vertices with couplings
// J_ij in {-1,+1} drawn uniformly at random (B = 1 plane), no biases, and a
// random initial configuration. Two runs of 100 iterations each are made,
// one in Mode II (roulette-wheel) and one in Mode I (random-scan), with a
// cosine cooling schedule of 10 stages x 10 iterations from T = 24 to T = 1.
// After each run the testbench checks every stored local field against a
// from-scratch recomputation for the final spins, that the event counters add
// up, that the energy did not rise in the roulette run, and it reports the cut
// value sum_{i<j, s_i != s_j} w_ij with w = -J and the cycle counts.
module tb_snowball_k2000;
  import snowball_pkg::*;
  localparam int N = 2000, LANES = 64, NW = (N + LANES - 1) / LANES;
  localparam int STAGES = 10, ITERS = 10;

  logic clk = 0, rst_n = 0;
  logic [13:0] cfg_n_spins;
  logic [4:0]  cfg_n_planes;
  logic        cfg_mode, cfg_uniformize;
  logic [15:0] cfg_n_stages;
  logic [31:0] cfg_iters_per_stage;
  logic [63:0] cfg_seed;
  logic        h_we, spin_we, sched_we, start, busy, done;
  logic [12:0] h_addr, mem_req_idx, fld_out_addr;
  logic signed [31:0] h_data, fld_out_data, bias_out_data;
  logic [6:0]  spin_waddr, s_out_addr;
  logic [63:0] spin_wdata, s_out_data, mem_rd_data;
  logic [9:0]  sched_addr;
  logic [31:0] sched_data;
  logic        mem_req_valid, mem_req_ready, mem_req_col, mem_rd_valid, mem_rd_ready;
  logic [31:0] stat_flips, stat_rejects, stat_fallbacks, stat_nulls, stat_cycles;

  snowball_top dut (.*);

  coupler_mem_model #(.N_MAX(2048), .LANES(LANES), .STALL_PCT(0), .IDX_W(13)) mem (
    .clk, .rst_n, .n_planes(1), .n_words(NW),
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_col(mem_req_col),
    .req_idx(mem_req_idx), .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready),
    .rd_data(mem_rd_data)
  );

  always #5 clk = ~clk;

  bit xs [N];
  int checks = 0, failures = 0;

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

  function automatic longint cut_value();
    longint c;
    c = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        if (xs[i] != xs[j]) c -= longint'(mem.jm[i][j]);
    return c;
  endfunction

  task automatic read_spins();
    for (int w = 0; w < NW; w++) begin
      s_out_addr = 7'(w); #1;
      for (int l = 0; l < LANES; l++) if (w * LANES + l < N) xs[w * LANES + l] = s_out_data[l];
    end
  endtask

  task automatic check_fields(input string tag);
    int bad;
    longint u;
    bad = 0;
    for (int i = 0; i < N; i++) begin
      u = 0;
      for (int j = 0; j < N; j++) if (j != i) u += longint'(mem.jm[i][j]) * (xs[j] ? 1 : -1);
      fld_out_addr = 13'(i); #1;
      if (longint'(fld_out_data) != u) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d of %0d local fields wrong", tag, bad, N));
  endtask

  task automatic load_spins();
    for (int w = 0; w < NW; w++) begin
      @(negedge clk);
      spin_we = 1; spin_waddr = 7'(w);
      for (int l = 0; l < LANES; l++) spin_wdata[l] = (w * LANES + l < N) ? xs[w * LANES + l] : 1'b0;
    end
    @(negedge clk) spin_we = 0;
  endtask

  task automatic run(input int mode, input string tag);
    longint c0, c1;
    int init_cycles;
    c0 = cut_value();
    load_spins();
    cfg_mode = 1'(mode);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    init_cycles = 0;
    while (!done) begin
      @(negedge clk);
      if (dut.state inside {dut.T_INIT_REQ, dut.T_INIT_FILL, dut.T_INIT_ACC, dut.T_INIT_WR}) init_cycles++;
    end
    read_spins();
    c1 = cut_value();
    check(stat_flips + stat_rejects + stat_nulls == 32'(STAGES * ITERS), $sformatf("%s: counters", tag));
    check_fields(tag);
    if (mode == 1) check(stat_flips > 0 && c1 >= c0, $sformatf("%s: cut %0d -> %0d", tag, c0, c1));
    $display("INFO %s: cut %0d -> %0d, flips=%0d rejects=%0d fallbacks=%0d, init cycles=%0d, sampling cycles=%0d (%0.1f per iteration)",
             tag, c0, c1, stat_flips, stat_rejects, stat_fallbacks, init_cycles,
             stat_cycles - init_cycles, real'(stat_cycles - init_cycles) / real'(STAGES * ITERS));
  endtask

  initial begin
    real tk;
    cfg_n_spins = 14'(N); cfg_n_planes = 5'd1; cfg_mode = 1; cfg_uniformize = 0;
    cfg_n_stages = 16'(STAGES); cfg_iters_per_stage = 32'(ITERS); cfg_seed = 64'h0000_2000_C0DE_0001;
    h_we = 0; spin_we = 0; sched_we = 0; start = 0; h_addr = '0; h_data = '0;
    spin_waddr = '0; spin_wdata = '0; sched_addr = '0; sched_data = '0;
    s_out_addr = '0; fld_out_addr = '0;
    for (int i = 0; i < 2048; i++)
      for (int j = 0; j < 2048; j++) mem.jm[i][j] = 16'sd0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) begin
        mem.jm[i][j] = ($urandom_range(0, 1) == 1) ? 16'sd1 : -16'sd1;
        mem.jm[j][i] = mem.jm[i][j];
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk) h_we = 1; h_addr = 13'(i); h_data = 0;
    end
    @(negedge clk) h_we = 0;
    // cosine schedule T_k = 1 + (24 - 1) (1 + cos(pi k / (STAGES - 1))) / 2
    for (int k = 0; k < STAGES; k++) begin
      tk = 1.0 + 23.0 * (1.0 + $cos(3.14159265358979 * real'(k) / real'(STAGES - 1))) / 2.0;
      @(negedge clk) sched_we = 1; sched_addr = 10'(k); sched_data = 32'($rtoi(tk * 65536.0));
    end
    @(negedge clk) sched_we = 0;
    for (int i = 0; i < N; i++) xs[i] = 1'($urandom);
    run(1, "roulette-wheel");
    for (int i = 0; i < N; i++) xs[i] = 1'($urandom);
    run(0, "random-scan");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
