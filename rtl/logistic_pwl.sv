// logistic_pwl: piecewise-linear logistic block.
//
// Computes the Glauber flip probability p = 1/(1+exp(dE/T)) for one spin.
// As in the architecture, z = dE/T is formed in fixed point and mapped
// through a piecewise-linear table instead of evaluating exp(). This design
// avoids a divider per lane by multiplying |dE| by a precomputed 1/T
// (Q16.16). The table covers |z| in [0,16) with 32 segments of width 1/2
// (knots in snowball_pkg::logistic_knot); |z| >= 16 gives exactly 0, which is
// what lets the roulette-wheel total weight reach W = 0. Negative dE uses the
// symmetry sigma(z) = 1 - sigma(-z). With t_zero set (T = 0) the block returns
// the zero-temperature limits: 1 for dE < 0, 1/2 for dE = 0, 0 for dE > 0.
// Segment width, table range and number formats are this design's choices.
//
// Interface: delta_e (signed DE_W), inv_t (Q16.16), t_zero in;
//            p_flip (Q1.16, 65536 = 1.0) out.
// Timing: combinational.
module logistic_pwl
  import snowball_pkg::*;
(
  input  logic signed [DE_W-1:0] delta_e,
  input  logic [T_W-1:0]         inv_t,
  input  logic                   t_zero,
  output logic [P_W-1:0]         p_flip
);
  logic [DE_W-1:0]      mag;
  logic [DE_W+T_W-1:0]  z;          // |dE| / T in Q.16
  logic [4:0]           seg;
  logic [14:0]          frac;
  logic [15:0]          y0, y1, q;
  logic [31:0]          drop;

  always_comb begin
    mag  = delta_e[DE_W-1] ? DE_W'(-delta_e) : DE_W'(delta_e);
    z    = (DE_W+T_W)'(mag) * (DE_W+T_W)'(inv_t);
    seg  = z[19:15];
    frac = z[14:0];
    y0   = logistic_knot(32'(seg));
    y1   = logistic_knot(32'(seg) + 32'd1);
    drop = (32'(y0 - y1) * 32'(frac)) >> 15;
    if (z >= (DE_W+T_W)'(1 << 20)) q = 16'd0;
    else                           q = y0 - drop[15:0];

    if (t_zero) begin
      if (delta_e == '0)          p_flip = P_HALF;
      else if (delta_e[DE_W-1])   p_flip = P_ONE;
      else                        p_flip = '0;
    end else if (delta_e[DE_W-1]) begin
      p_flip = P_ONE - P_W'(q);
    end else begin
      p_flip = P_W'(q);
    end
  end
endmodule
