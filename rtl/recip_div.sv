// recip_div: sequential reciprocal of the annealing temperature.
//
// Computes inv_t = floor(2^32 / t) for t in Q16.16, i.e. 1/T in Q16.16,
// saturating at 2^32-1, by restoring long division one quotient bit per
// cycle. The MCMC engine runs it once whenever the annealing stage changes,
// so the per-lane logistic blocks only need a multiplier. Using a reciprocal
// is this design's choice; the architecture states only that T is fixed
// point and z = dE/T is fed to a lookup table.
//
// Interface: start pulse with t; busy while running; done pulse with inv_t.
// t = 0 is reported through t_zero and finishes in one cycle.
// Timing: 33 cycles from start to done for t != 0.
module recip_div
  import snowball_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [T_W-1:0] t,
  output logic           busy,
  output logic           done,
  output logic [T_W-1:0] inv_t,
  output logic           t_zero
);
  logic [T_W:0]   rem;
  logic [T_W:0]   quo;
  logic [T_W-1:0] d;
  logic [5:0]     bit_i;
  logic [T_W:0]   rem_sh;

  always_comb rem_sh = {rem[T_W-1:0], (bit_i == 6'd32)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; inv_t <= '0; t_zero <= 1'b1;
      rem <= '0; quo <= '0; d <= '0; bit_i <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        if (t == '0) begin
          t_zero <= 1'b1; inv_t <= '1; done <= 1'b1; busy <= 1'b0;
        end else begin
          t_zero <= 1'b0; d <= t; rem <= '0; quo <= '0;
          bit_i <= 6'd32; busy <= 1'b1;
        end
      end else if (busy) begin
        // dividend is 2^32: its only set bit enters at bit_i == 32
        if (rem_sh >= {1'b0, d}) begin
          rem <= rem_sh - {1'b0, d};
          quo <= {quo[T_W-1:0], 1'b1};
        end else begin
          rem <= rem_sh;
          quo <= {quo[T_W-1:0], 1'b0};
        end
        if (bit_i == 6'd0) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (quo[T_W-1]) inv_t <= '1;  // quotient 2^32 saturates
          else inv_t <= {quo[T_W-2:0], (rem_sh >= {1'b0, d})};
        end else begin
          bit_i <= bit_i - 6'd1;
        end
      end
    end
  end
endmodule
