// tb_spin_regfile: self-checking test of the spin register file.
// Loads random words, flips random single spins, checks both read ports
// against a reference, and checks that a load in the same cycle as a flip
// wins.
module tb_spin_regfile;
  import snowball_pkg::*;
  localparam int N_MAX = 512, LANES = 64, W_MAX = N_MAX / LANES;
  logic clk = 0, ld_en = 0, flip_en = 0;
  logic [2:0] ld_addr, rd_addr, out_addr;
  logic [LANES-1:0] ld_data, rd_data, out_data;
  logic [8:0] flip_idx;
  logic [LANES-1:0] ref_w [W_MAX];
  int checks = 0, failures = 0;

  spin_regfile #(.N_MAX(N_MAX), .LANES(LANES)) dut (.*);
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
    ld_addr = '0; rd_addr = '0; out_addr = '0; ld_data = '0; flip_idx = '0;
    for (int w = 0; w < W_MAX; w++) begin
      @(negedge clk);
      ld_en = 1; ld_addr = 3'(w); ld_data = {$urandom, $urandom};
      ref_w[w] = ld_data;
    end
    @(negedge clk) ld_en = 0;
    for (int w = 0; w < W_MAX; w++) begin
      rd_addr = 3'(w); out_addr = 3'(W_MAX - 1 - w); #1;
      check(rd_data == ref_w[w], "load read back");
      check(out_data == ref_w[W_MAX - 1 - w], "s_out read back");
    end
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      flip_en = 1; flip_idx = 9'($urandom_range(0, N_MAX - 1));
      @(negedge clk);
      flip_en = 0;
      ref_w[flip_idx >> 6][flip_idx[5:0]] = ~ref_w[flip_idx >> 6][flip_idx[5:0]];
      rd_addr = 3'(flip_idx >> 6); #1;
      check(rd_data == ref_w[flip_idx >> 6], $sformatf("flip of spin %0d", flip_idx));
    end
    // load beats flip
    @(negedge clk);
    ld_en = 1; ld_addr = 3'd2; ld_data = 64'h0123_4567_89AB_CDEF;
    flip_en = 1; flip_idx = 9'(2 * 64 + 5);
    @(negedge clk);
    ld_en = 0; flip_en = 0; rd_addr = 3'd2; #1;
    check(rd_data == 64'h0123_4567_89AB_CDEF, "load has priority over flip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
