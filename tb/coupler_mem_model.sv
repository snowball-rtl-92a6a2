// coupler_mem_model: behavioural model of the off-chip bit-plane memory.
//
// Not synthesizable design logic: it stands in for the board memory, DMA and
// interconnect that hold the row-major and column-major bit-planes. The
// couplings are kept as a signed integer matrix jm (written by the testbench
// through hierarchical access); on a request the model serves row idx
// (col = 0) or column idx (col = 1) as 2 * n_planes * n_words 64-bit words in
// the order plane, sign (positive, negative), word, decomposing each J into
// sign and magnitude bits on the fly. Request acceptance and word delivery
// are delayed at random (STALL_PCT percent of cycles) to exercise the
// handshakes. N_MAX sizes the stored matrix; IDX_W matches the kernel's
// line-index width, which may be wider.
module coupler_mem_model #(
  parameter int N_MAX     = 2048,
  parameter int LANES     = 64,
  parameter int STALL_PCT = 25,
  parameter int IDX_W     = $clog2(N_MAX)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  int               n_planes,
  input  int               n_words,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_col,
  input  logic [IDX_W-1:0] req_idx,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [LANES-1:0] rd_data
);
  shortint jm [N_MAX][N_MAX];
  int  stalls = 0;
  bit  active;
  bit  col_q;
  int  idx_q, cnt;

  function automatic logic [LANES-1:0] line_word(input bit col, input int idx, input int c);
    int b, s, w, v, o;
    logic [LANES-1:0] d;
    w = c % n_words;
    s = (c / n_words) % 2;
    b = c / (2 * n_words);
    for (int l = 0; l < LANES; l++) begin
      o = w * LANES + l;
      v = (o < N_MAX) ? (col ? int'(jm[o][idx]) : int'(jm[idx][o])) : 0;
      d[l] = (s == 0) ? (v > 0 && (((v) >> b) & 1) == 1)
                      : (v < 0 && (((-v) >> b) & 1) == 1);
    end
    return d;
  endfunction

  initial begin
    req_ready = 0; rd_valid = 0; rd_data = '0; active = 0;
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      req_ready <= 0; rd_valid <= 0; active <= 0;
    end else begin
      if (req_valid && req_ready) begin
        active <= 1; col_q <= req_col; idx_q <= int'(req_idx); cnt <= 0;
        req_ready <= 0;
        rd_valid  <= 0;
      end else if (!active) begin
        req_ready <= req_valid && ($urandom_range(0, 99) >= STALL_PCT);
      end
      if (active) begin
        if (rd_valid && rd_ready) begin
          cnt <= cnt + 1;
          if (cnt + 1 == 2 * n_planes * n_words) begin
            active <= 0; rd_valid <= 0;
          end else if ($urandom_range(0, 99) < STALL_PCT) begin
            rd_valid <= 0; stalls <= stalls + 1;
          end else begin
            rd_data <= line_word(col_q, idx_q, cnt + 1);
          end
        end else if (!rd_valid) begin
          // a word not yet offered: offer it unless stalling
          if ($urandom_range(0, 99) >= STALL_PCT) begin
            rd_valid <= 1;
            rd_data  <= line_word(col_q, idx_q, cnt);
          end else begin
            stalls <= stalls + 1;
          end
        end
        // rd_valid && !rd_ready: hold the offered word
      end
    end
  end
endmodule
