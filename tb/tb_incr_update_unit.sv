// tb_incr_update_unit: self-checking test of the incremental update unit.
// For random column couplings J_ij, fields and s_old, every unmasked lane must
// become u_i - 2 J_ij s_old and every masked lane must be unchanged. It
// covers every plane count from 1 to B_MAX and both signs of s_old.
module tb_incr_update_unit;
  import snowball_pkg::*;
  localparam int LANES = 64, B_MAX = 16;
  logic [B_MAX-1:0][LANES-1:0] pos, neg;
  logic s_old;
  logic [LANES-1:0] lane_mask;
  logic [LANES-1:0][FIELD_W-1:0] fields_in, fields_out;
  int checks = 0, failures = 0;
  int jv [LANES];

  incr_update_unit #(.LANES(LANES), .B_MAX(B_MAX)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb, expv, so;
    for (int trial = 0; trial < 60; trial++) begin
      nb = 1 + (trial % B_MAX);
      s_old = 1'($urandom);
      so = s_old ? 1 : -1;
      lane_mask = (trial % 2 == 0) ? '1 : {$urandom, $urandom};
      for (int l = 0; l < LANES; l++) begin
        jv[l] = int'($urandom_range(0, (1 << nb) - 1)) * (($urandom_range(0, 1) == 1) ? 1 : -1);
        fields_in[l] = FIELD_W'(int'($urandom_range(0, 2000000)) - 1000000);
        for (int b = 0; b < B_MAX; b++) begin
          pos[b][l] = (jv[l] > 0) && (((jv[l]) >> b) & 1);
          neg[b][l] = (jv[l] < 0) && (((-jv[l]) >> b) & 1);
        end
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        expv = lane_mask[l] ? int'(fields_in[l]) - 2 * jv[l] * so : int'(fields_in[l]);
        check(int'(fields_out[l]) == expv,
              $sformatf("trial %0d lane %0d got %0d exp %0d", trial, l, int'(fields_out[l]), expv));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
