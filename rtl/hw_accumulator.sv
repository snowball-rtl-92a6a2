// hw_accumulator: Hamming-weight accumulator for local-field initialisation.
//
// Builds u_i^(J) = sum_j J_ij s_j for one row i from the row-major bit-planes
// without multipliers. For every plane b and 64-spin word w it counts
//   m_P = popcount(B_b+ word),  o_P = popcount(B_b+ word AND spin word)
//   m_N = popcount(B_b- word),  o_N = popcount(B_b- word AND spin word)
// and adds 2^b * ((2 o_P - m_P) - (2 o_N - m_N)), because among the set
// couplers o spins are +1 and m - o are -1. This is the architecture's
// formula. All planes of one word are handled in the same cycle (this
// design's choice of parallelism). lane_mask removes columns that must not
// count (padding beyond N, and the diagonal j = i).
//
// Interface: clear zeroes the sum; acc_valid adds the term of the presented
// word; u_j holds the running sum.
// Timing: one word per cycle, result valid the cycle after the last add.
module hw_accumulator
  import snowball_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned B_MAX = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          acc_valid,
  input  logic [B_MAX-1:0][LANES-1:0]   pos,
  input  logic [B_MAX-1:0][LANES-1:0]   neg,
  input  logic [LANES-1:0]              spins,
  input  logic [LANES-1:0]              lane_mask,
  output logic signed [FIELD_W-1:0]     u_j,
  output logic signed [FIELD_W-1:0]     term
);
  localparam int unsigned CNT_W = $clog2(LANES + 1);

  function automatic logic [CNT_W-1:0] popcount(input logic [LANES-1:0] v);
    logic [CNT_W-1:0] c;
    c = '0;
    for (int k = 0; k < LANES; k++) c = c + CNT_W'(v[k]);
    return c;
  endfunction

  // one signed contribution per plane, (2 o_P - m_P) - (2 o_N - m_N)
  logic signed [FIELD_W-1:0] plane_sum [B_MAX];

  for (genvar b = 0; b < B_MAX; b++) begin : g_plane
    logic [LANES-1:0] p, n;
    always_comb begin
      p = pos[b] & lane_mask;
      n = neg[b] & lane_mask;
      plane_sum[b] = (FIELD_W'(2) * FIELD_W'(popcount(p & spins)) - FIELD_W'(popcount(p)))
                   - (FIELD_W'(2) * FIELD_W'(popcount(n & spins)) - FIELD_W'(popcount(n)));
    end
  end

  always_comb begin
    term = '0;
    for (int b = 0; b < B_MAX; b++) term = term + (plane_sum[b] <<< b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         u_j <= '0;
    else if (clear)     u_j <= '0;
    else if (acc_valid) u_j <= u_j + term;
  end
endmodule
