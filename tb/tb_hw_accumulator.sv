// tb_hw_accumulator: self-checking test of the Hamming-weight accumulator.
// Random signed couplings J_j (|J| < 2^B) and spins are split into bit-planes
// by the testbench; after accumulating all words the result must equal
// sum_j J_j s_j over the unmasked columns, computed directly with integer
// multiplies. Also checks clear and that acc_valid = 0 holds the sum, and
// runs a 3 x 3 worked example with two planes (+3, -1 and +2 couplings) on
// every row and every spin configuration.
module tb_hw_accumulator;
  import snowball_pkg::*;
  localparam int LANES = 64, B_MAX = 16, NW = 6;
  logic clk = 0, rst_n = 0, clear = 0, acc_valid = 0;
  logic [B_MAX-1:0][LANES-1:0] pos, neg;
  logic [LANES-1:0] spins, lane_mask;
  logic signed [FIELD_W-1:0] u_j, term;
  int checks = 0, failures = 0;
  int jv [NW][LANES];
  logic [LANES-1:0] sp [NW];
  logic [LANES-1:0] mk [NW];

  hw_accumulator #(.LANES(LANES), .B_MAX(B_MAX)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint expv;
    int nb;
    pos = '0; neg = '0; spins = '0; lane_mask = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Worked example: the 3 x 3 matrix J = [0 3 -1; 3 0 2; -1 2 0] with two
    // planes, B0+ = [0 1 0; 1 0 0; 0 0 0], B0- = [0 0 1; 0 0 0; 1 0 0],
    // B1+ = [0 1 0; 1 0 1; 0 1 0], B1- = 0, given as bit-planes directly.
    // Every row against all 8 spin configurations.
    begin
      int jm3 [3][3] = '{'{0, 3, -1}, '{3, 0, 2}, '{-1, 2, 0}};
      bit b0p [3][3] = '{'{0, 1, 0}, '{1, 0, 0}, '{0, 0, 0}};
      bit b0n [3][3] = '{'{0, 0, 1}, '{0, 0, 0}, '{1, 0, 0}};
      bit b1p [3][3] = '{'{0, 1, 0}, '{1, 0, 1}, '{0, 1, 0}};
      for (int cfg = 0; cfg < 8; cfg++)
        for (int i = 0; i < 3; i++) begin
          expv = 0;
          for (int j = 0; j < 3; j++) expv += longint'(jm3[i][j]) * (cfg[j] ? 1 : -1);
          @(negedge clk) clear = 1;
          @(negedge clk) clear = 0;
          pos = '0; neg = '0;
          for (int j = 0; j < 3; j++) begin
            pos[0][j] = b0p[i][j]; neg[0][j] = b0n[i][j]; pos[1][j] = b1p[i][j];
          end
          spins = LANES'(cfg); lane_mask = LANES'(3'b111);
          acc_valid = 1;
          @(negedge clk);
          acc_valid = 0;
          check(longint'(u_j) == expv,
                $sformatf("3x3 example row %0d spins %03b got %0d exp %0d", i, cfg[2:0], u_j, expv));
        end
    end
    for (int trial = 0; trial < 40; trial++) begin
      nb = (trial % 4 == 0) ? 1 : (trial % 4 == 1) ? 2 : (trial % 4 == 2) ? 8 : 16;
      expv = 0;
      for (int w = 0; w < NW; w++) begin
        sp[w] = {$urandom, $urandom};
        mk[w] = (trial % 3 == 0) ? {$urandom, $urandom} : '1;
        for (int l = 0; l < LANES; l++) begin
          jv[w][l] = int'($urandom_range(0, (1 << nb) - 1)) * (($urandom_range(0, 1) == 1) ? 1 : -1);
          if (mk[w][l]) expv += longint'(jv[w][l]) * (sp[w][l] ? 1 : -1);
        end
      end
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      check(u_j == 0, "clear zeroes");
      for (int w = 0; w < NW; w++) begin
        for (int b = 0; b < B_MAX; b++)
          for (int l = 0; l < LANES; l++) begin
            pos[b][l] = (jv[w][l] > 0) && (((jv[w][l]) >> b) & 1);
            neg[b][l] = (jv[w][l] < 0) && (((-jv[w][l]) >> b) & 1);
          end
        spins = sp[w]; lane_mask = mk[w];
        acc_valid = 1;
        @(negedge clk);
        acc_valid = 0;
        if (w == 2) begin
          int hold;
          hold = u_j;
          @(negedge clk);
          check(u_j == hold, "acc_valid low holds sum");
        end
      end
      check(longint'(u_j) == expv, $sformatf("trial %0d planes %0d got %0d exp %0d", trial, nb, u_j, expv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
