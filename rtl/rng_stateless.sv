// rng_stateless: stateless pseudo-random number generator.
//
// Each 32-bit variate is a pure function of a 64-bit host seed, the annealing
// stage k, the iteration t and a purpose salt r; no generator state is kept,
// so several variates can be produced in the same cycle by giving each
// instance its own salt. This follows the architecture's description of its
// RNG. The mixing function itself (two SplitMix64 finaliser rounds, see
// snowball_pkg::stateless_rand) is this design's choice, as the architecture
// does not name one.
//
// Interface: seed, stage, iter, salt in; rnd out.
// Timing: purely combinational (zero latency); a pipelined implementation
// would register between the two mixing rounds.
module rng_stateless
  import snowball_pkg::*;
(
  input  logic [SEED_W-1:0]  seed,
  input  logic [STAGE_W-1:0] stage,
  input  logic [ITER_W-1:0]  iter,
  input  logic [SALT_W-1:0]  salt,
  output logic [RAND_W-1:0]  rnd
);
  always_comb rnd = stateless_rand(seed, stage, iter, salt);
endmodule
