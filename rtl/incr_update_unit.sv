// incr_update_unit: incremental local-field update after a spin flip.
//
// When spin j flips, every other coupler field changes by
// u_i^(J) <- u_i^(J) - 2 J_ij s_j_old. The unit takes one 64-field word of
// u^(J) together with the column-major bit-plane words of column j for the
// same rows, rebuilds J_ij = sum_b 2^b (B_b+(j,i) - B_b-(j,i)) per lane and
// applies the update, which is the architecture's per-plane rule
// (+2^(b+1) s_old subtracted for a positive bit, added for a negative bit)
// summed over planes. s_old is given as the stored bit x_j (1 means +1).
// lane_mask excludes the flipped spin itself and padding lanes; combining all
// planes of a word into one read-modify-write is this design's choice.
//
// Interface: pos/neg planes, s_old, lane_mask, fields_in; fields_out.
// Timing: combinational; the caller reads, updates and writes back one word
// per cycle.
module incr_update_unit
  import snowball_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned B_MAX = 16
) (
  input  logic [B_MAX-1:0][LANES-1:0]         pos,
  input  logic [B_MAX-1:0][LANES-1:0]         neg,
  input  logic                                s_old,
  input  logic [LANES-1:0]                    lane_mask,
  input  logic [LANES-1:0][FIELD_W-1:0]       fields_in,
  output logic [LANES-1:0][FIELD_W-1:0]       fields_out
);
  always_comb begin
    logic signed [FIELD_W-1:0] jij;
    for (int i = 0; i < LANES; i++) begin
      jij = '0;
      for (int b = 0; b < B_MAX; b++) begin
        if (pos[b][i]) jij = jij + (FIELD_W'(1) <<< b);
        if (neg[b][i]) jij = jij - (FIELD_W'(1) <<< b);
      end
      if (!lane_mask[i])  fields_out[i] = fields_in[i];
      else if (s_old)     fields_out[i] = fields_in[i] - (jij <<< 1);  // s_old = +1
      else                fields_out[i] = fields_in[i] + (jij <<< 1);  // s_old = -1
    end
  end
endmodule
