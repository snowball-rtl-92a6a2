// tb_snowball_torus: the kernel at its default parameters on sparse Max-Cut
// instances shaped like the toroidal-grid graphs of the Gset suite.
//
// Each instance is an R x C two-dimensional grid with wrap-around edges
// (every vertex has four neighbours, 2 R C edges) whose weights are +1 or -1
// at random, so J_ij = -w_ij on grid edges and 0 elsewhere (one bit-plane, no
// biases). Two sizes are run: 40 x 20 = 800 vertices with 1600 edges and
// 100 x 70 = 7000 vertices with 14000 edges, the vertex and edge counts of the
// 800- and 7000-vertex torus instances used to evaluate the architecture.
// The grid shapes and the random weights are this testbench's own; the
// published instances themselves are not reproduced.
//
// The 800-vertex graph is annealed in Mode II (roulette-wheel) and in Mode I
// (random-scan), the 7000-vertex graph in Mode II, each for 200 iterations
// with a cosine schedule of 10 stages from T = 4 to T = 0.25 starting from a
// random configuration. After every run the testbench recomputes all local
// fields from the final spins and compares them with the stored ones, checks
// that the event counters add up, that the roulette runs flipped a spin on
// every iteration and raised the cut, and that each roulette iteration took no
// more than its cycle bound (selection 2 n_words + 6 plus, on a flip, the
// column stream of 2 n_words words, n_words read-modify-write cycles and a
// few cycles of hand-over, with the memory model never stalling). It reports
// cut values and cycle counts.
module tb_snowball_torus;
  import snowball_pkg::*;
  localparam int LANES = 64, N_BIG = 7000, MEM_N = 7040;
  localparam int STAGES = 10, ITERS = 20;

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

  int n_spins, n_words, rows, cols;

  snowball_top dut (.*);

  coupler_mem_model #(.N_MAX(MEM_N), .LANES(LANES), .STALL_PCT(0), .IDX_W(13)) mem (
    .clk, .rst_n, .n_planes(1), .n_words(n_words),
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_col(mem_req_col),
    .req_idx(mem_req_idx), .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready),
    .rd_data(mem_rd_data)
  );

  always #5 clk = ~clk;

  bit xs [N_BIG];
  int nb [N_BIG][4];     // neighbour indices on the torus
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #400000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cut = sum of w_ij = -J_ij over grid edges whose ends differ
  function automatic longint cut_value();
    longint c;
    c = 0;
    for (int i = 0; i < n_spins; i++)
      for (int k = 0; k < 4; k++)
        if (nb[i][k] > i && xs[i] != xs[nb[i][k]]) c -= longint'(mem.jm[i][nb[i][k]]);
    return c;
  endfunction

  // Build an R x C torus with random +/-1 weights. Zeroes the previous graph.
  task automatic build_torus(input int r, input int c);
    int i, right, down;
    rows = r; cols = c; n_spins = r * c; n_words = (n_spins + LANES - 1) / LANES;
    for (int a = 0; a < MEM_N; a++)
      for (int b = 0; b < MEM_N; b++) mem.jm[a][b] = 16'sd0;
    for (int y = 0; y < r; y++)
      for (int x = 0; x < c; x++) begin
        i     = y * c + x;
        right = y * c + (x + 1) % c;
        down  = ((y + 1) % r) * c + x;
        nb[i][0] = right;
        nb[i][1] = down;
        nb[i][2] = y * c + (x + c - 1) % c;
        nb[i][3] = ((y + r - 1) % r) * c + x;
        mem.jm[i][right] = ($urandom_range(0, 1) == 1) ? 16'sd1 : -16'sd1;
        mem.jm[right][i] = mem.jm[i][right];
        mem.jm[i][down]  = ($urandom_range(0, 1) == 1) ? 16'sd1 : -16'sd1;
        mem.jm[down][i]  = mem.jm[i][down];
      end
  endtask

  task automatic read_spins();
    for (int w = 0; w < n_words; w++) begin
      s_out_addr = 7'(w); #1;
      for (int l = 0; l < LANES; l++) if (w * LANES + l < n_spins) xs[w * LANES + l] = s_out_data[l];
    end
  endtask

  task automatic check_fields(input string tag);
    int bad;
    longint u;
    bad = 0;
    for (int i = 0; i < n_spins; i++) begin
      u = 0;
      for (int k = 0; k < 4; k++) u += longint'(mem.jm[i][nb[i][k]]) * (xs[nb[i][k]] ? 1 : -1);
      fld_out_addr = 13'(i); #1;
      if (longint'(fld_out_data) != u) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d of %0d local fields wrong", tag, bad, n_spins));
  endtask

  task automatic load_spins();
    for (int w = 0; w < n_words; w++) begin
      @(negedge clk);
      spin_we = 1; spin_waddr = 7'(w);
      for (int l = 0; l < LANES; l++)
        spin_wdata[l] = (w * LANES + l < n_spins) ? xs[w * LANES + l] : 1'b0;
    end
    @(negedge clk) spin_we = 0;
  endtask

  task automatic run(input int mode, input string tag);
    longint c0, c1;
    int init_cycles, iter_cycles, worst, bound;
    bit in_init;
    for (int i = 0; i < n_spins; i++) xs[i] = 1'($urandom);
    c0 = cut_value();
    load_spins();
    cfg_n_spins = 14'(n_spins);
    cfg_mode    = 1'(mode);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    init_cycles = 0; iter_cycles = 0; worst = 0;
    while (!done) begin
      @(negedge clk);
      in_init = dut.state inside {dut.T_INIT_REQ, dut.T_INIT_FILL, dut.T_INIT_ACC, dut.T_INIT_WR};
      if (in_init) init_cycles++;
      else begin
        iter_cycles++;
        if (dut.state == dut.T_NEXT) begin
          if (iter_cycles > worst) worst = iter_cycles;
          iter_cycles = 0;
        end
      end
    end
    read_spins();
    c1 = cut_value();
    check(stat_flips + stat_rejects + stat_nulls == 32'(STAGES * ITERS), $sformatf("%s: counters", tag));
    check_fields(tag);
    // selection + column stream + read-modify-write + hand-over, plus a stage change
    bound = (2 * n_words + 6) + (2 * n_words + n_words + 8) + 36;
    if (mode == 1) begin
      check(stat_flips == 32'(STAGES * ITERS), $sformatf("%s: %0d flips", tag, stat_flips));
      check(c1 > c0, $sformatf("%s: cut %0d -> %0d", tag, c0, c1));
      check(worst <= bound, $sformatf("%s: slowest iteration %0d cycles > bound %0d", tag, worst, bound));
    end
    $display("INFO %s: N=%0d cut %0d -> %0d, flips=%0d rejects=%0d fallbacks=%0d, init cycles=%0d, sampling cycles=%0d (%0.1f per iteration, slowest %0d)",
             tag, n_spins, c0, c1, stat_flips, stat_rejects, stat_fallbacks, init_cycles,
             stat_cycles - init_cycles, real'(stat_cycles - init_cycles) / real'(STAGES * ITERS), worst);
  endtask

  initial begin
    real tk;
    cfg_n_spins = '0; cfg_n_planes = 5'd1; cfg_mode = 1; cfg_uniformize = 0;
    cfg_n_stages = 16'(STAGES); cfg_iters_per_stage = 32'(ITERS); cfg_seed = 64'h7042_0800_0000_0011;
    h_we = 0; spin_we = 0; sched_we = 0; start = 0; h_addr = '0; h_data = '0;
    spin_waddr = '0; spin_wdata = '0; sched_addr = '0; sched_data = '0;
    s_out_addr = '0; fld_out_addr = '0;
    n_spins = 0; n_words = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_BIG; i++) begin
      @(negedge clk) h_we = 1; h_addr = 13'(i); h_data = 0;
    end
    @(negedge clk) h_we = 0;
    // cosine schedule T_k = 0.25 + (4 - 0.25) (1 + cos(pi k / (STAGES - 1))) / 2
    for (int k = 0; k < STAGES; k++) begin
      tk = 0.25 + 3.75 * (1.0 + $cos(3.14159265358979 * real'(k) / real'(STAGES - 1))) / 2.0;
      @(negedge clk) sched_we = 1; sched_addr = 10'(k); sched_data = 32'($rtoi(tk * 65536.0));
    end
    @(negedge clk) sched_we = 0;

    build_torus(40, 20);
    run(1, "torus 800 roulette-wheel");
    run(0, "torus 800 random-scan");
    build_torus(100, 70);
    run(1, "torus 7000 roulette-wheel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
