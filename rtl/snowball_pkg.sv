// snowball_pkg: shared constants, types and pure functions of the Snowball
// all-to-all Ising machine.
//
// Spins s_i in {-1,+1} are stored as bits x_i = (s_i+1)/2 and packed 64 to a
// word, as the architecture prescribes. Couplings J_ij are held as 1-bit
// positive and negative bit-planes, J_ij = sum_b 2^b (B_b+(i,j) - B_b-(i,j)).
// Field, probability and temperature formats are this design's own choices:
//   * local fields u_i            : FIELD_W-bit two's complement integers
//   * flip probabilities p_flip   : Q1.16 unsigned (65536 = 1.0), P_W bits
//   * temperature T and 1/T       : Q16.16 unsigned, 32 bits
// The stateless random function below (a SplitMix64-style finaliser) is this
// design's choice; the architecture only requires a pure function of the
// 64-bit seed, stage, iteration and a purpose salt.
package snowball_pkg;

  localparam int unsigned FIELD_W = 32;   // local-field width
  localparam int unsigned DE_W    = FIELD_W + 2; // energy change 2*s*u
  localparam int unsigned P_W     = 17;   // Q1.16 probability
  localparam int unsigned T_W     = 32;   // Q16.16 temperature
  localparam int unsigned SEED_W  = 64;
  localparam int unsigned RAND_W  = 32;
  localparam int unsigned STAGE_W = 16;
  localparam int unsigned ITER_W  = 32;
  localparam int unsigned SALT_W  = 8;

  localparam logic [P_W-1:0] P_ONE  = P_W'(65536);
  localparam logic [P_W-1:0] P_HALF = P_W'(32768);

  // Purpose salts of the stateless RNG.
  typedef enum logic [SALT_W-1:0] {
    SALT_SITE     = 8'd1,  // Mode I site index j
    SALT_ACCEPT   = 8'd2,  // Mode I acceptance variate v
    SALT_ROULETTE = 8'd3   // Mode II roulette position r
  } salt_e;

  // Spin-selection modes.
  typedef enum logic {
    MODE_RANDOM_SCAN = 1'b0,  // Mode I
    MODE_ROULETTE    = 1'b1   // Mode II
  } mode_e;

  // Result of one MCMC iteration.
  typedef struct packed {
    logic        flip;      // a spin is to be flipped
    logic        fallback;  // Mode II fell back to random-scan (W = 0)
    logic        null_move; // uniformized Mode II chose "no flip"
    logic [31:0] idx;       // selected spin index j
    logic        s_old;     // x_j before the flip
  } step_result_t;

  // 64-bit mixing finaliser (SplitMix64 constants).
  function automatic logic [63:0] mix64(input logic [63:0] z);
    logic [63:0] x;
    x = z;
    x = (x ^ (x >> 30)) * 64'hBF58476D1CE4E5B9;
    x = (x ^ (x >> 27)) * 64'h94D049BB133111EB;
    x = x ^ (x >> 31);
    return x;
  endfunction

  // Stateless variate: pure function of (seed, stage, iteration, salt).
  function automatic logic [RAND_W-1:0] stateless_rand(
      input logic [SEED_W-1:0]  seed,
      input logic [STAGE_W-1:0] stage,
      input logic [ITER_W-1:0]  iter,
      input logic [SALT_W-1:0]  salt);
    logic [63:0] key;
    logic [63:0] h;
    key = seed ^ mix64({stage, salt, 8'h5B, iter} + 64'h9E3779B97F4A7C15);
    h   = mix64(key + 64'h9E3779B97F4A7C15);
    return RAND_W'(h >> 32);
  endfunction

  // Piecewise-linear table of sigma(-z) = 1/(1+exp(z)) for z >= 0 in Q0.16:
  // knot k sits at z = k/2 and holds round(65536 / (1 + exp(k/2))),
  // k = 0..32; beyond z = 16 the probability is taken as 0.
  function automatic logic [15:0] logistic_knot(input int unsigned k);
    case (k)
      0: return 16'd32768;  1: return 16'd24743;  2: return 16'd17625;
      3: return 16'd11955;  4: return 16'd7812;   5: return 16'd4971;
      6: return 16'd3108;   7: return 16'd1921;   8: return 16'd1179;
      9: return 16'd720;   10: return 16'd439;   11: return 16'd267;
     12: return 16'd162;   13: return 16'd98;    14: return 16'd60;
     15: return 16'd36;    16: return 16'd22;    17: return 16'd13;
     18: return 16'd8;     19: return 16'd5;     20: return 16'd3;
     21: return 16'd2;     22: return 16'd1;     23: return 16'd1;
      default: return 16'd0;
    endcase
  endfunction

endpackage
