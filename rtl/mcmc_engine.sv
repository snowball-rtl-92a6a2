// mcmc_engine: dual-mode MCMC spin-selection engine with simulated annealing.
//
// Each start performs one iteration t of annealing stage k and reports at
// most one spin to flip; the caller flips it and updates the local fields
// (asynchronous single-spin update). Both modes share one datapath: LANES
// logistic blocks that turn dE_i = 2 s_i (u_i^(J) + h_i) of one 64-spin word
// into flip probabilities p_i.
//
//  Mode I, random-scan: j = floor(u N / 2^32) for a 32-bit variate u; the
//    word of j is read, p_j formed, and the flip is accepted when a second
//    variate v satisfies v/2^32 < p_j (the upper 16 bits of v are compared
//    with p_j in Q1.16).
//  Mode II, roulette-wheel: pass 1 reads every word, stores each word's sum
//    of p_i and the total W = sum p_i. If W = 0 the iteration falls back to
//    Mode I. Otherwise r = floor(v W / 2^32) is drawn in [0, W) and the
//    unique j with sum_{i<j} p_i <= r < sum_{i<=j} p_i is found: pass 2 walks
//    the word sums to the word holding r, and one more read of that word
//    resolves the lane. The flip of j is then unconditional.
//  Uniformized Mode II (uniformize = 1): r is drawn in [0, N) instead (in
//    units of p), and r >= W means a null transition, i.e. no flip with
//    probability 1 - W/N; W = 0 is then always a null transition.
//
// All of the above follows the architecture. The two-pass search through
// stored word sums, the number formats and the schedule organisation are this
// design's choices. The annealing schedule is a preloaded table of K_MAX
// temperatures T_k (Q16.16); when the requested stage differs from the one
// last loaded, the engine first computes 1/T_k with a 33-cycle divider.
// Random variates come from two stateless generators keyed by
// (seed, k, t, salt) with distinct salts, so Mode I draws j and v together.
//
// Interface: start with stage/iter; done pulses with result. Reads the
// field, bias and spin memories through rd_word (combinational data back).
// Timing (cycles from start to done, excluding a stage change):
//   Mode I: 2.  Mode II: n_words (pass 1) + 1 + up to n_words (pass 2) + 2.
//   A stage change adds 35 (divider start, 33 quotient bits, hand-over).
module mcmc_engine
  import snowball_pkg::*;
#(
  parameter int unsigned N_MAX = 8192,
  parameter int unsigned LANES = 64,
  parameter int unsigned K_MAX = 1024,
  localparam int unsigned W_MAX   = N_MAX / LANES,
  localparam int unsigned WADDR_W = (W_MAX > 1) ? $clog2(W_MAX) : 1,
  localparam int unsigned IDX_W   = $clog2(N_MAX),
  localparam int unsigned LANE_W  = $clog2(LANES),
  localparam int unsigned KADDR_W = (K_MAX > 1) ? $clog2(K_MAX) : 1,
  localparam int unsigned WSUM_W  = P_W + LANE_W,
  localparam int unsigned TOT_W   = P_W + IDX_W + 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  mode_e                         mode,
  input  logic                          uniformize,
  input  logic [IDX_W:0]                n_spins,
  input  logic [WADDR_W:0]              n_words,
  input  logic [SEED_W-1:0]             seed,
  // schedule load
  input  logic                          sched_we,
  input  logic [KADDR_W-1:0]            sched_addr,
  input  logic [T_W-1:0]                sched_data,
  // iteration control
  input  logic                          start,
  input  logic [STAGE_W-1:0]            stage,
  input  logic [ITER_W-1:0]             iter,
  output logic                          busy,
  output logic                          done,
  output step_result_t                  result,
  // memory read (combinational)
  output logic [WADDR_W-1:0]            rd_word,
  input  logic [LANES-1:0][FIELD_W-1:0] uj_word,
  input  logic [LANES-1:0][FIELD_W-1:0] h_word,
  input  logic [LANES-1:0]              spin_word
);
  typedef enum logic [2:0] {
    S_IDLE, S_RECIP, S_RS, S_EVAL, S_DRAW, S_SCAN, S_PICK
  } state_e;

  state_e state;

  // ---------------- annealing schedule --------------------------------------
  logic [T_W-1:0] sched [K_MAX];
  always_ff @(posedge clk) if (sched_we) sched[sched_addr] <= sched_data;

  logic [STAGE_W-1:0] loaded_stage;
  logic               loaded_valid;
  logic [STAGE_W-1:0] cur_stage;
  logic [ITER_W-1:0]  cur_iter;
  logic               div_start, div_busy, div_done, t_zero;
  logic [T_W-1:0]     inv_t;

  recip_div u_recip (
    .clk, .rst_n, .start(div_start), .t(sched[KADDR_W'(cur_stage)]),
    .busy(div_busy), .done(div_done), .inv_t, .t_zero
  );

  // ---------------- random variates ------------------------------------------
  logic [SALT_W-1:0]  salt_a, salt_b;
  logic [RAND_W-1:0]  rnd_a, rnd_b;
  rng_stateless u_rng_a (.seed, .stage(cur_stage), .iter(cur_iter), .salt(salt_a), .rnd(rnd_a));
  rng_stateless u_rng_b (.seed, .stage(cur_stage), .iter(cur_iter), .salt(salt_b), .rnd(rnd_b));

  // ---------------- per-lane flip probabilities ------------------------------
  logic [LANES-1:0][P_W-1:0] p_lane;
  logic [LANES-1:0]          lane_valid;
  logic [WSUM_W-1:0]         word_sum;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [DE_W-1:0] u_full, de;
    logic [P_W-1:0]         p_raw;
    always_comb begin
      u_full = DE_W'($signed(uj_word[l])) + DE_W'($signed(h_word[l]));
      de     = spin_word[l] ? (u_full <<< 1) : -(u_full <<< 1);
    end
    logistic_pwl u_log (.delta_e(de), .inv_t, .t_zero, .p_flip(p_raw));
    assign lane_valid[l] = ((IDX_W+1)'(rd_word) * (IDX_W+1)'(LANES) + (IDX_W+1)'(l)) < n_spins;
    assign p_lane[l]     = lane_valid[l] ? p_raw : '0;
  end

  always_comb begin
    word_sum = '0;
    for (int l = 0; l < LANES; l++) word_sum = word_sum + WSUM_W'(p_lane[l]);
  end

  // ---------------- roulette-wheel state -------------------------------------
  logic [WSUM_W-1:0]  wsum [W_MAX];
  logic [TOT_W-1:0]   total, cum, r_pos;
  logic [WADDR_W-1:0] w_idx;
  logic               fallback;

  // Mode I site and acceptance
  logic [IDX_W-1:0]   rs_idx;
  logic [63:0]        rs_prod;
  assign rs_prod = 64'(rnd_a) * 64'(n_spins);
  assign rs_idx  = IDX_W'(rs_prod >> 32);

  // Mode II draw
  logic [TOT_W-1:0]   range_w;
  logic [TOT_W+31:0]  r_prod;
  assign range_w = uniformize ? (TOT_W'(n_spins) << 16) : total;
  assign r_prod  = (TOT_W+32)'(rnd_a) * (TOT_W+32)'(range_w);

  // lane resolution inside the picked word
  logic [LANE_W-1:0]  pick_lane;
  always_comb begin
    logic [TOT_W-1:0] acc;
    logic             found;
    acc = cum; found = 1'b0; pick_lane = '0;
    for (int l = 0; l < LANES; l++) begin
      acc = acc + TOT_W'(p_lane[l]);
      if (!found && (acc > r_pos)) begin
        found = 1'b1;
        pick_lane = LANE_W'(l);
      end
    end
  end

  // ---------------- read address and salts -----------------------------------
  always_comb begin
    rd_word = w_idx;
    salt_a  = SALT_ROULETTE;
    salt_b  = SALT_ACCEPT;
    if (state == S_RS) begin
      rd_word = WADDR_W'(rs_idx >> LANE_W);
      salt_a  = SALT_SITE;
    end
  end

  // ---------------- control --------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; result <= '0;
      loaded_stage <= '0; loaded_valid <= 1'b0; div_start <= 1'b0;
      cur_stage <= '0; cur_iter <= '0; total <= '0; cum <= '0; r_pos <= '0;
      w_idx <= '0; fallback <= 1'b0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      if (sched_we) loaded_valid <= 1'b0;   // a rewritten schedule is reloaded
      unique case (state)
        S_IDLE: if (start) begin
          cur_stage <= stage;
          cur_iter  <= iter;
          fallback  <= 1'b0;
          total     <= '0;
          w_idx     <= '0;
          if (!loaded_valid || loaded_stage != stage) begin
            div_start    <= 1'b1;
            loaded_stage <= stage;
            loaded_valid <= 1'b1;
            state        <= S_RECIP;
          end else begin
            state <= (mode == MODE_ROULETTE) ? S_EVAL : S_RS;
          end
        end
        S_RECIP: if (div_done) state <= (mode == MODE_ROULETTE) ? S_EVAL : S_RS;
        S_RS: begin
          result.flip      <= ({1'b0, rnd_b[31:16]} < p_lane[rs_idx[LANE_W-1:0]]);
          result.fallback  <= fallback;
          result.null_move <= 1'b0;
          result.idx       <= 32'(rs_idx);
          result.s_old     <= spin_word[rs_idx[LANE_W-1:0]];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_EVAL: begin
          wsum[w_idx] <= word_sum;
          total       <= total + TOT_W'(word_sum);
          if ((WADDR_W+1)'(w_idx) == n_words - 1'b1) state <= S_DRAW;
          else w_idx <= w_idx + 1'b1;
        end
        S_DRAW: begin
          w_idx <= '0;
          cum   <= '0;
          r_pos <= TOT_W'(r_prod >> 32);
          if (total == '0 && !uniformize) begin
            fallback <= 1'b1;          // degenerate weight: one Mode I step
            state    <= S_RS;
          end else if (TOT_W'(r_prod >> 32) >= total) begin
            result   <= '0;            // uniformized null transition
            result.null_move <= 1'b1;
            done     <= 1'b1;
            state    <= S_IDLE;
          end else begin
            state <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (cum + TOT_W'(wsum[w_idx]) > r_pos) state <= S_PICK;
          else begin
            cum   <= cum + TOT_W'(wsum[w_idx]);
            w_idx <= w_idx + 1'b1;
          end
        end
        S_PICK: begin
          result.flip      <= 1'b1;
          result.fallback  <= 1'b0;
          result.null_move <= 1'b0;
          result.idx       <= 32'({w_idx, pick_lane});
          result.s_old     <= spin_word[pick_lane];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // The search never runs past the last word: r < W guarantees a hit.
  a_scan_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_SCAN |-> (WADDR_W+1)'(w_idx) < n_words);
  // A picked spin always has a nonzero weight.
  a_pick_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_PICK |-> p_lane[pick_lane] != '0);
endmodule
