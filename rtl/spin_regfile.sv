// spin_regfile: spin register file.
//
// Holds the spin configuration as bits x_i = (s_i + 1)/2 packed into 64-bit
// words, following the architecture. The host loads the initial
// configuration word by word; the kernel reads whole words (local-field
// initialisation and probability evaluation) and flips single spins after an
// accepted move; a second read port gives the configuration s_out to the
// host. A load has priority over a flip in the same cycle (this design's
// choice; the two never coincide in the kernel).
//
// Interface: ld_en/ld_addr/ld_data, flip_en/flip_idx, rd_addr/rd_data,
// out_addr/out_data.
// Timing: combinational reads, updates at the clock edge.
module spin_regfile
  import snowball_pkg::*;
#(
  parameter int unsigned N_MAX = 8192,
  parameter int unsigned LANES = 64,
  localparam int unsigned W_MAX   = N_MAX / LANES,
  localparam int unsigned WADDR_W = (W_MAX > 1) ? $clog2(W_MAX) : 1,
  localparam int unsigned IDX_W   = $clog2(N_MAX),
  localparam int unsigned LANE_W  = $clog2(LANES)
) (
  input  logic                 clk,
  input  logic                 ld_en,
  input  logic [WADDR_W-1:0]   ld_addr,
  input  logic [LANES-1:0]     ld_data,
  input  logic                 flip_en,
  input  logic [IDX_W-1:0]     flip_idx,
  input  logic [WADDR_W-1:0]   rd_addr,
  output logic [LANES-1:0]     rd_data,
  input  logic [WADDR_W-1:0]   out_addr,
  output logic [LANES-1:0]     out_data
);
  logic [LANES-1:0] words [W_MAX];

  logic [WADDR_W-1:0] f_word;
  logic [LANE_W-1:0]  f_lane;
  assign f_word = WADDR_W'(flip_idx >> LANE_W);
  assign f_lane = flip_idx[LANE_W-1:0];

  always_ff @(posedge clk) begin
    if (ld_en)        words[ld_addr] <= ld_data;
    else if (flip_en) words[f_word][f_lane] <= ~words[f_word][f_lane];
  end

  assign rd_data  = words[rd_addr];
  assign out_data = words[out_addr];
endmodule
