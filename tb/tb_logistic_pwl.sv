// tb_logistic_pwl: self-checking test of the piecewise-linear logistic block.
// Reference: 65536 / (1 + exp(dE/T)) evaluated in real arithmetic. Checks the
// approximation error over a sweep of dE and T, exact values at dE = 0, the
// symmetry p(dE) + p(-dE) = 1, the zero tail for dE/T >= 16 and the T = 0
// limits.
module tb_logistic_pwl;
  import snowball_pkg::*;
  logic signed [DE_W-1:0] delta_e;
  logic [T_W-1:0]         inv_t;
  logic                   t_zero;
  logic [P_W-1:0]         p_flip;
  int checks = 0, failures = 0;

  logistic_pwl dut (.delta_e, .inv_t, .t_zero, .p_flip);

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
    real tval, z, ref_p, err, worst_r;
    int  pos_p, worst;
    worst = 0;
    worst_r = 0.0;
    t_zero = 0;
    // T in {0.25, 1, 3.5, 40} (Q16.16 reciprocals)
    for (int ti = 0; ti < 4; ti++) begin
      tval  = (ti == 0) ? 0.25 : (ti == 1) ? 1.0 : (ti == 2) ? 3.5 : 40.0;
      inv_t = T_W'($rtoi(65536.0 / tval));
      for (int d = -300; d <= 300; d += 3) begin
        delta_e = DE_W'(d); #1;
        z = real'(d) * real'(inv_t) / 65536.0;
        ref_p = 65536.0 / (1.0 + $exp(z));
        err = real'(p_flip) - ref_p;
        if (err < 0.0) err = -err;
        check(err <= 260.0,
              $sformatf("T=%f dE=%0d p=%0d ref=%f", tval, d, p_flip, ref_p));
        if (err > worst_r) worst_r = err;
        pos_p = p_flip;
        delta_e = DE_W'(-d); #1;
        check(int'(p_flip) + pos_p == 65536, $sformatf("symmetry dE=%0d", d));
        if (z >= 16.0) check(pos_p == 0, $sformatf("tail zero z=%f", z));
        if (z <= -16.0) check(pos_p == 65536, $sformatf("tail one z=%f", z));
      end
    end
    inv_t = 32'd65536;
    delta_e = '0; #1 check(p_flip == 17'd32768, "dE = 0 gives 1/2");
    delta_e = DE_W'(16); #1 check(p_flip == 17'd0, "z = 16 gives 0");
    delta_e = DE_W'(15); #1 check(p_flip < 17'd5, "z = 15 gives ~0");
    delta_e = DE_W'(1000000); #1 check(p_flip == 0, "large dE gives 0");
    delta_e = -DE_W'(1000000); #1 check(p_flip == 17'd65536, "large negative dE gives 1");
    // T = 0
    t_zero = 1;
    delta_e = DE_W'(-1); #1 check(p_flip == 17'd65536, "T=0, dE<0");
    delta_e = '0;        #1 check(p_flip == 17'd32768, "T=0, dE=0");
    delta_e = DE_W'(1);  #1 check(p_flip == 17'd0, "T=0, dE>0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
