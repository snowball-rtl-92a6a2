// field_mem: on-chip local-field memory.
//
// Stores N signed fields, LANES to a word, so that one access serves the 64
// spins of one packed spin word. The design instantiates it twice: once for
// the coupler-induced fields u^(J) and once for the external biases h, as the
// architecture keeps both on chip; the MCMC engine forms u = u^(J) + h.
// Port A is the kernel's read-modify-write port (combinational read,
// synchronous write with per-lane enables); port B is a second read port for
// the host's readout. Word organisation and the asynchronous read are this
// design's choices.
//
// Interface: rd_addr/rd_data, wr_en/wr_addr/wr_mask/wr_data, rb_addr/rb_data.
// Timing: read data follows the address in the same cycle; writes land at
// the clock edge.
module field_mem
  import snowball_pkg::*;
#(
  parameter int unsigned N_MAX = 8192,
  parameter int unsigned LANES = 64,
  localparam int unsigned W_MAX   = N_MAX / LANES,
  localparam int unsigned WADDR_W = (W_MAX > 1) ? $clog2(W_MAX) : 1
) (
  input  logic                          clk,
  input  logic [WADDR_W-1:0]            rd_addr,
  output logic [LANES-1:0][FIELD_W-1:0] rd_data,
  input  logic                          wr_en,
  input  logic [WADDR_W-1:0]            wr_addr,
  input  logic [LANES-1:0]              wr_mask,
  input  logic [LANES-1:0][FIELD_W-1:0] wr_data,
  input  logic [WADDR_W-1:0]            rb_addr,
  output logic [LANES-1:0][FIELD_W-1:0] rb_data
);
  logic [LANES-1:0][FIELD_W-1:0] mem [W_MAX];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int i = 0; i < LANES; i++)
        if (wr_mask[i]) mem[wr_addr][i] <= wr_data[i];
    end
  end

  assign rd_data = mem[rd_addr];
  assign rb_data = mem[rb_addr];
endmodule
