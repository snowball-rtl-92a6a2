// tb_rng_stateless: self-checking test of the stateless random generator.
// Checks known-answer vectors (computed with an independent 64-bit
// SplitMix64-style reference), purity (same key, same value), sensitivity to
// every key field, and that the mean and the top bit of many variates look
// uniform.
module tb_rng_stateless;
  import snowball_pkg::*;
  logic [SEED_W-1:0]  seed;
  logic [STAGE_W-1:0] stage;
  logic [ITER_W-1:0]  iter;
  logic [SALT_W-1:0]  salt;
  logic [RAND_W-1:0]  rnd;
  int checks = 0, failures = 0;

  rng_stateless dut (.seed, .stage, .iter, .salt, .rnd);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic kat(input logic [63:0] s, input logic [15:0] k, input logic [31:0] t,
                     input logic [7:0] r, input logic [31:0] exp_v);
    seed = s; stage = k; iter = t; salt = r; #1;
    check(rnd == exp_v, $sformatf("KAT seed=%h k=%0d t=%0d r=%0d got %h exp %h", s, k, t, r, rnd, exp_v));
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a, b;
    longint unsigned sum;
    int ones;
    kat(64'h0, 16'd0, 32'd0, 8'd1, 32'h3033c631);
    kat(64'h0123456789ABCDEF, 16'd3, 32'd77, 8'd2, 32'hcb5aa7fa);
    kat(64'hFFFFFFFFFFFFFFFF, 16'd65535, 32'hFFFFFFFF, 8'd3, 32'h36aa5ad7);
    kat(64'd42, 16'd1, 32'd1000, 8'd1, 32'h867e0b65);
    // purity and key sensitivity
    seed = 64'hDEADBEEF; stage = 5; iter = 9; salt = 1; #1 a = rnd;
    seed = 64'h1;        #1;
    seed = 64'hDEADBEEF; #1 b = rnd;
    check(a == b, "same key gives same value");
    salt = 2;  #1 check(rnd != a, "salt changes value");  salt = 1;
    iter = 10; #1 check(rnd != a, "iteration changes value"); iter = 9;
    stage = 6; #1 check(rnd != a, "stage changes value"); stage = 5;
    seed = 64'hDEADBEEE; #1 check(rnd != a, "seed changes value");
    // uniformity over iterations
    sum = 0; ones = 0;
    for (int t = 0; t < 4096; t++) begin
      seed = 64'h5EED; stage = 0; iter = t; salt = 3; #1;
      sum += rnd; ones += rnd[31];
    end
    check((sum / 4096) > 64'h7400_0000 && (sum / 4096) < 64'h8C00_0000, "mean near 2^31");
    check(ones > 1900 && ones < 2200, $sformatf("top bit balanced (%0d)", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
