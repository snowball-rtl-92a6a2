// snowball_top: Snowball all-to-all Ising machine kernel.
//
// Minimises H(s) = -1/2 sum_ij J_ij s_i s_j - sum_i h_i s_i over N spins with
// every pair coupled. J is held off chip as 1-bit positive/negative bit-planes
// in two layouts, row-major and column-major; the kernel fetches one line at a
// time through the coupler-line read port (mem_*), so on-chip storage grows
// with N, not N^2.
//
// Operation after start:
//  1. Initialisation: for i = 0..N-1, fetch row i of all planes into the
//     row-major buffer, accumulate u_i^(J) = sum_{j!=i} J_ij s_j word by word
//     in the Hamming-weight accumulator, and write it to the local-field
//     memory.
//  2. Sampling: for n_stages annealing stages of iters_per_stage iterations
//     each, the dual-mode MCMC engine proposes at most one spin j. If a spin
//     flips, the spin register file is updated, column j of all planes is
//     fetched into the column-major buffer and every word of u^(J) is
//     read-modified-written by the incremental update unit
//     (u_i^(J) -= 2 J_ij s_j_old), before the next iteration starts.
//  3. done rises; the spins are read through s_out_addr/s_out_data and the
//     fields through fld_out_addr/fld_out_data.
// This sequence is the architecture's. Running the phases strictly one after
// another (no overlap of fetch, selection and update) is this design's choice.
//
// Coupler-line read port: a request (mem_req_valid/ready, mem_req_col = 0 for
// row-major / 1 for column-major, mem_req_idx = line) is answered by
// 2 * n_planes * n_words 64-bit words on mem_rd_valid/ready/data, ordered
// plane b, then sign (positive, negative), then word w. Only one request is
// outstanding at a time.
//
// Host load ports (h_*, spin_*, sched_*) are written while the kernel is idle.
// Timing per iteration with the port delivering one word per cycle:
//   Mode I: about 4 cycles, plus 2*n_planes*n_words + n_words + 3 after a flip.
//   Mode II: about 2*n_words + 4, plus the same after a flip.
//   Initialisation: N * (2*n_planes*n_words + n_words + 3).
module snowball_top
  import snowball_pkg::*;
#(
  parameter int unsigned N_MAX = 8192,
  parameter int unsigned LANES = 64,
  parameter int unsigned B_MAX = 16,
  parameter int unsigned K_MAX = 1024,
  localparam int unsigned W_MAX   = N_MAX / LANES,
  localparam int unsigned WADDR_W = (W_MAX > 1) ? $clog2(W_MAX) : 1,
  localparam int unsigned IDX_W   = $clog2(N_MAX),
  localparam int unsigned LANE_W  = $clog2(LANES),
  localparam int unsigned PL_W    = $clog2(B_MAX + 1),
  localparam int unsigned KADDR_W = (K_MAX > 1) ? $clog2(K_MAX) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration (hold stable while busy)
  input  logic [IDX_W:0]              cfg_n_spins,      // N, 1..N_MAX
  input  logic [PL_W-1:0]             cfg_n_planes,     // B, 1..B_MAX
  input  logic                        cfg_mode,         // 0 random-scan, 1 roulette
  input  logic                        cfg_uniformize,   // Mode II uniformized variant
  input  logic [STAGE_W-1:0]          cfg_n_stages,     // stages in the schedule
  input  logic [ITER_W-1:0]           cfg_iters_per_stage,
  input  logic [SEED_W-1:0]           cfg_seed,
  // host loads
  input  logic                        h_we,
  input  logic [IDX_W-1:0]            h_addr,
  input  logic signed [FIELD_W-1:0]   h_data,
  input  logic                        spin_we,
  input  logic [WADDR_W-1:0]          spin_waddr,
  input  logic [LANES-1:0]            spin_wdata,
  input  logic                        sched_we,
  input  logic [KADDR_W-1:0]          sched_addr,
  input  logic [T_W-1:0]              sched_data,
  // control
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  // coupler-line read port to off-chip bit-plane memory
  output logic                        mem_req_valid,
  input  logic                        mem_req_ready,
  output logic                        mem_req_col,
  output logic [IDX_W-1:0]            mem_req_idx,
  input  logic                        mem_rd_valid,
  output logic                        mem_rd_ready,
  input  logic [LANES-1:0]            mem_rd_data,
  // readout
  input  logic [WADDR_W-1:0]          s_out_addr,
  output logic [LANES-1:0]            s_out_data,
  input  logic [IDX_W-1:0]            fld_out_addr,
  output logic signed [FIELD_W-1:0]   fld_out_data,     // u^(J) of spin fld_out_addr
  output logic signed [FIELD_W-1:0]   bias_out_data,    // h of spin fld_out_addr
  // event counters of the last run
  output logic [31:0]                 stat_flips,
  output logic [31:0]                 stat_rejects,
  output logic [31:0]                 stat_fallbacks,
  output logic [31:0]                 stat_nulls,
  output logic [31:0]                 stat_cycles
);
  typedef enum logic [3:0] {
    T_IDLE, T_INIT_REQ, T_INIT_FILL, T_INIT_ACC, T_INIT_WR,
    T_STEP, T_WAIT, T_UPD_REQ, T_UPD_FILL, T_UPD_RMW, T_NEXT
  } top_state_e;

  top_state_e state;

  logic [WADDR_W:0]   n_words;
  assign n_words = (WADDR_W+1)'((cfg_n_spins + (IDX_W+1)'(LANES - 1)) >> LANE_W);

  logic [IDX_W-1:0]   row;          // row being initialised
  logic [WADDR_W-1:0] w;            // word counter
  logic [STAGE_W-1:0] k;            // annealing stage
  logic [ITER_W-1:0]  t_in_stage;
  logic [ITER_W-1:0]  t_global;
  step_result_t       flip_res;

  // ---------------- lane masks ----------------------------------------------
  function automatic logic [LANES-1:0] valid_lanes(input logic [WADDR_W-1:0] word,
                                                   input logic [IDX_W:0] n);
    logic [LANES-1:0] m;
    for (int l = 0; l < LANES; l++)
      m[l] = ((IDX_W+1)'(word) * (IDX_W+1)'(LANES) + (IDX_W+1)'(l)) < n;
    return m;
  endfunction

  function automatic logic [LANES-1:0] self_lane(input logic [WADDR_W-1:0] word,
                                                 input logic [IDX_W-1:0] idx);
    logic [LANES-1:0] m;
    m = '0;
    if (WADDR_W'(idx >> LANE_W) == word) m[idx[LANE_W-1:0]] = 1'b1;
    return m;
  endfunction

  // ---------------- coupler line buffers ---------------------------------------
  logic row_clear, col_clear, row_full, col_full;
  logic [B_MAX-1:0][LANES-1:0] row_pos, row_neg, col_pos, col_neg;

  coupler_tile_buf #(.N_MAX(N_MAX), .LANES(LANES), .B_MAX(B_MAX)) u_row_buf (
    .clk, .rst_n, .clear(row_clear), .n_words, .n_planes(cfg_n_planes),
    .wr_valid(mem_rd_valid && mem_rd_ready && state == T_INIT_FILL),
    .wr_data(mem_rd_data), .full(row_full),
    .rd_word(w), .rd_pos(row_pos), .rd_neg(row_neg)
  );

  coupler_tile_buf #(.N_MAX(N_MAX), .LANES(LANES), .B_MAX(B_MAX)) u_col_buf (
    .clk, .rst_n, .clear(col_clear), .n_words, .n_planes(cfg_n_planes),
    .wr_valid(mem_rd_valid && mem_rd_ready && state == T_UPD_FILL),
    .wr_data(mem_rd_data), .full(col_full),
    .rd_word(w), .rd_pos(col_pos), .rd_neg(col_neg)
  );

  // ---------------- spin register file ---------------------------------------
  logic [WADDR_W-1:0] spin_raddr;
  logic [LANES-1:0]   spin_rword;
  logic               spin_flip;

  spin_regfile #(.N_MAX(N_MAX), .LANES(LANES)) u_spins (
    .clk, .ld_en(spin_we && !busy), .ld_addr(spin_waddr), .ld_data(spin_wdata),
    .flip_en(spin_flip), .flip_idx(IDX_W'(flip_res.idx)),
    .rd_addr(spin_raddr), .rd_data(spin_rword),
    .out_addr(s_out_addr), .out_data(s_out_data)
  );

  // ---------------- local-field and bias memories ------------------------------
  logic [WADDR_W-1:0]            uj_raddr, uj_waddr;
  logic [LANES-1:0][FIELD_W-1:0] uj_rword, uj_wword, uj_rb, h_rword, h_rb;
  logic [LANES-1:0]              uj_wmask;
  logic                          uj_we;

  field_mem #(.N_MAX(N_MAX), .LANES(LANES)) u_uj_mem (
    .clk, .rd_addr(uj_raddr), .rd_data(uj_rword),
    .wr_en(uj_we), .wr_addr(uj_waddr), .wr_mask(uj_wmask), .wr_data(uj_wword),
    .rb_addr(WADDR_W'(fld_out_addr >> LANE_W)), .rb_data(uj_rb)
  );

  logic [WADDR_W-1:0] eng_rd_word;

  field_mem #(.N_MAX(N_MAX), .LANES(LANES)) u_h_mem (
    .clk, .rd_addr(eng_rd_word), .rd_data(h_rword),
    .wr_en(h_we && !busy), .wr_addr(WADDR_W'(h_addr >> LANE_W)),
    .wr_mask(self_lane(WADDR_W'(h_addr >> LANE_W), h_addr)),
    .wr_data({LANES{h_data}}),
    .rb_addr(WADDR_W'(fld_out_addr >> LANE_W)), .rb_data(h_rb)
  );

  assign fld_out_data  = uj_rb[fld_out_addr[LANE_W-1:0]];
  assign bias_out_data = h_rb[fld_out_addr[LANE_W-1:0]];

  // ---------------- Hamming-weight accumulator --------------------------------
  logic                       hwa_clear, hwa_acc;
  logic signed [FIELD_W-1:0]  hwa_u;

  hw_accumulator #(.LANES(LANES), .B_MAX(B_MAX)) u_hwa (
    .clk, .rst_n, .clear(hwa_clear), .acc_valid(hwa_acc),
    .pos(row_pos), .neg(row_neg), .spins(spin_rword),
    .lane_mask(valid_lanes(w, cfg_n_spins) & ~self_lane(w, row)),
    .u_j(hwa_u), .term()
  );

  // ---------------- incremental update unit ------------------------------------
  logic [LANES-1:0][FIELD_W-1:0] upd_word;

  incr_update_unit #(.LANES(LANES), .B_MAX(B_MAX)) u_upd (
    .pos(col_pos), .neg(col_neg), .s_old(flip_res.s_old),
    .lane_mask(valid_lanes(w, cfg_n_spins) & ~self_lane(w, IDX_W'(flip_res.idx))),
    .fields_in(uj_rword), .fields_out(upd_word)
  );

  // ---------------- MCMC engine --------------------------------------------------
  logic          eng_start, eng_busy, eng_done;
  step_result_t  eng_res;

  mcmc_engine #(.N_MAX(N_MAX), .LANES(LANES), .K_MAX(K_MAX)) u_engine (
    .clk, .rst_n,
    .mode(mode_e'(cfg_mode)), .uniformize(cfg_uniformize),
    .n_spins(cfg_n_spins), .n_words, .seed(cfg_seed),
    .sched_we(sched_we && !busy), .sched_addr, .sched_data,
    .start(eng_start), .stage(k), .iter(t_global),
    .busy(eng_busy), .done(eng_done), .result(eng_res),
    .rd_word(eng_rd_word), .uj_word(uj_rword), .h_word(h_rword), .spin_word(spin_rword)
  );

  // ---------------- datapath steering -------------------------------------------
  always_comb begin
    mem_req_valid = (state == T_INIT_REQ) || (state == T_UPD_REQ);
    mem_req_col   = (state == T_UPD_REQ);
    mem_req_idx   = (state == T_UPD_REQ) ? IDX_W'(flip_res.idx) : row;
    mem_rd_ready  = (state == T_INIT_FILL && !row_full) || (state == T_UPD_FILL && !col_full);

    row_clear = (state == T_INIT_REQ);
    col_clear = (state == T_UPD_REQ);
    hwa_clear = (state == T_INIT_REQ);
    hwa_acc   = (state == T_INIT_ACC);

    spin_raddr = (state == T_INIT_ACC) ? w : eng_rd_word;
    uj_raddr   = (state == T_UPD_RMW)  ? w : eng_rd_word;

    uj_we    = 1'b0;
    uj_waddr = w;
    uj_wmask = '0;
    uj_wword = upd_word;
    if (state == T_INIT_WR) begin
      uj_we    = 1'b1;
      uj_waddr = WADDR_W'(row >> LANE_W);
      uj_wmask = self_lane(WADDR_W'(row >> LANE_W), row);
      uj_wword = {LANES{hwa_u}};
    end else if (state == T_UPD_RMW) begin
      uj_we    = 1'b1;
      uj_wmask = '1;
    end

    eng_start = (state == T_STEP);
    spin_flip = (state == T_UPD_REQ) && mem_req_ready;
  end

  // ---------------- sequencer ------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= T_IDLE; done <= 1'b0;
      row <= '0; w <= '0; k <= '0; t_in_stage <= '0; t_global <= '0; flip_res <= '0;
      stat_flips <= '0; stat_rejects <= '0; stat_fallbacks <= '0; stat_nulls <= '0;
      stat_cycles <= '0;
    end else begin
      if (state != T_IDLE) stat_cycles <= stat_cycles + 1;
      unique case (state)
        T_IDLE: if (start) begin
          done <= 1'b0; row <= '0; w <= '0; k <= '0; t_in_stage <= '0; t_global <= '0;
          stat_flips <= '0; stat_rejects <= '0; stat_fallbacks <= '0; stat_nulls <= '0;
          stat_cycles <= '0;
          state <= T_INIT_REQ;
        end
        T_INIT_REQ:  if (mem_req_ready) state <= T_INIT_FILL;
        T_INIT_FILL: if (row_full) begin w <= '0; state <= T_INIT_ACC; end
        T_INIT_ACC: begin
          if ((WADDR_W+1)'(w) == n_words - 1'b1) state <= T_INIT_WR;
          else w <= w + 1'b1;
        end
        T_INIT_WR: begin
          w <= '0;
          if ((IDX_W+1)'(row) == cfg_n_spins - 1'b1) begin
            state <= (cfg_n_stages == '0 || cfg_iters_per_stage == '0) ? T_IDLE : T_STEP;
            done  <= (cfg_n_stages == '0 || cfg_iters_per_stage == '0);
          end else begin
            row   <= row + 1'b1;
            state <= T_INIT_REQ;
          end
        end
        T_STEP: state <= T_WAIT;
        T_WAIT: if (eng_done) begin
          flip_res <= eng_res;
          if (eng_res.fallback)  stat_fallbacks <= stat_fallbacks + 1;
          if (eng_res.null_move) stat_nulls     <= stat_nulls + 1;
          if (eng_res.flip) begin
            stat_flips <= stat_flips + 1;
            state      <= T_UPD_REQ;
          end else begin
            if (!eng_res.null_move) stat_rejects <= stat_rejects + 1;
            state <= T_NEXT;
          end
        end
        T_UPD_REQ:  if (mem_req_ready) state <= T_UPD_FILL;
        T_UPD_FILL: if (col_full) begin w <= '0; state <= T_UPD_RMW; end
        T_UPD_RMW: begin
          if ((WADDR_W+1)'(w) == n_words - 1'b1) state <= T_NEXT;
          else w <= w + 1'b1;
        end
        T_NEXT: begin
          t_global <= t_global + 1;
          if (t_in_stage == cfg_iters_per_stage - 1) begin
            t_in_stage <= '0;
            if (k == cfg_n_stages - 1'b1) begin
              state <= T_IDLE;
              done  <= 1'b1;
            end else begin
              k     <= k + 1'b1;
              state <= T_STEP;
            end
          end else begin
            t_in_stage <= t_in_stage + 1;
            state      <= T_STEP;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign busy = (state != T_IDLE);

  // Request handshake: a pending request holds its line until accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_idx) && $stable(mem_req_col));
  // Bit-plane words are only taken while a line is being filled.
  a_rd_in_fill: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_ready |-> (state == T_INIT_FILL || state == T_UPD_FILL));
  // The engine is started only when idle.
  a_eng_idle: assert property (@(posedge clk) disable iff (!rst_n)
    eng_start |-> !eng_busy);
endmodule
