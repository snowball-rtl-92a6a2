// coupler_tile_buf: on-chip coupler line buffer.
//
// Holds one line of the coupling matrix - a row i (row-major instance, used to
// initialise the local fields) or a column j (column-major instance, used for
// the incremental update after a flip) - for every active bit-plane and both
// signs. The line arrives from off-chip memory as a stream of 64-bit words in
// the order: plane b = 0..n_planes-1, then sign (positive, negative), then
// word w = 0..n_words-1. Once full, one read returns the positive and
// negative words of word index w for all planes at once, which is what the
// Hamming-weight accumulator and the incremental update unit consume per
// cycle. Planes at or above n_planes read as zero, so a lower-precision
// problem needs no clearing of the storage.
// Buffering one whole line (rather than a smaller tile) and the stream order
// are this design's choices.
//
// Interface: clear restarts the fill; wr_valid/wr_data deliver words (always
// accepted); full goes high after the last word. rd_word selects w.
// Timing: one word per cycle in; read is combinational.
module coupler_tile_buf
  import snowball_pkg::*;
#(
  parameter int unsigned N_MAX = 8192,
  parameter int unsigned LANES = 64,
  parameter int unsigned B_MAX = 16,
  localparam int unsigned W_MAX   = N_MAX / LANES,
  localparam int unsigned WADDR_W = (W_MAX > 1) ? $clog2(W_MAX) : 1,
  localparam int unsigned PL_W    = $clog2(B_MAX + 1),
  localparam int unsigned BI_W    = (B_MAX > 1) ? $clog2(B_MAX) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic [WADDR_W:0]      n_words,
  input  logic [PL_W-1:0]       n_planes,
  input  logic                  wr_valid,
  input  logic [LANES-1:0]      wr_data,
  output logic                  full,
  input  logic [WADDR_W-1:0]    rd_word,
  output logic [B_MAX-1:0][LANES-1:0] rd_pos,
  output logic [B_MAX-1:0][LANES-1:0] rd_neg
);
  logic [LANES-1:0] pos_mem [B_MAX][W_MAX];
  logic [LANES-1:0] neg_mem [B_MAX][W_MAX];

  logic [WADDR_W:0]  w_cnt;
  logic              sgn;
  logic [PL_W-1:0]   b_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_cnt <= '0; sgn <= 1'b0; b_cnt <= '0; full <= 1'b0;
    end else if (clear) begin
      w_cnt <= '0; sgn <= 1'b0; b_cnt <= '0; full <= 1'b0;
    end else if (wr_valid && !full) begin
      if (w_cnt == n_words - 1'b1) begin
        w_cnt <= '0;
        sgn   <= ~sgn;
        if (sgn) begin
          b_cnt <= b_cnt + 1'b1;
          if (b_cnt + 1'b1 == n_planes) full <= 1'b1;
        end
      end else begin
        w_cnt <= w_cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid && !full && !clear) begin
      if (!sgn) pos_mem[BI_W'(b_cnt)][w_cnt[WADDR_W-1:0]] <= wr_data;
      else      neg_mem[BI_W'(b_cnt)][w_cnt[WADDR_W-1:0]] <= wr_data;
    end
  end

  always_comb begin
    for (int b = 0; b < B_MAX; b++) begin
      if (PL_W'(b) < n_planes) begin
        rd_pos[b] = pos_mem[b][rd_word];
        rd_neg[b] = neg_mem[b][rd_word];
      end else begin
        rd_pos[b] = '0;
        rd_neg[b] = '0;
      end
    end
  end
endmodule
