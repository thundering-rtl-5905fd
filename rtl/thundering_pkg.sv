// thundering_pkg: constants, types and elaboration-time helper functions shared by the
// multi-stream random number generator.
//
// The generator is built around a 64-bit linear congruential generator (LCG),
//   x[n+1] = (a * x[n] + c) mod 2^64,
// whose state is shared by many output units. The multiplier a = 6364136223846793005,
// the increment c = 54 and the modulus 2^64 are the values the design is published with.
// The root unit steps the LCG six states at a time ("advance-6"), so it needs the
// coefficients of the six-fold composition of the step, x[n+6] = A6 * x[n] + C6 with
// A6 = a^6 and C6 = c * (1 + a + ... + a^5); the functions below compute any advance-k
// pair at elaboration time with a plain loop (k is at most 6, so no log-time method
// is needed).
//
// The 32-bit output permutation follows O'Neill's "xorshift high, random rotation"
// (XSH-RR) output function for a 64-bit state; its shift constants are derived here
// from the state and output widths.
package thundering_pkg;

  localparam int unsigned STATE_W = 64;   // LCG state width, modulus 2^64
  localparam int unsigned OUT_W   = 32;   // width of one random number
  localparam int unsigned DEC_W   = 128;  // xorshift128 decorrelator state width

  localparam logic [STATE_W-1:0] LCG_A_DEFAULT = 64'd6364136223846793005;
  localparam logic [STATE_W-1:0] LCG_C_DEFAULT = 64'd54;

  // Number of state generators in the root unit, equal to the MAC latency.
  localparam int unsigned MAC_LAT_DEFAULT = 6;

  // XSH-RR constants for a STATE_W -> OUT_W output function.
  localparam int unsigned ROT_BITS    = $clog2(OUT_W);                 // 5
  localparam int unsigned XSHIFT      = (ROT_BITS + OUT_W) / 2;        // 18
  localparam int unsigned BOTTOMSPARE = STATE_W - OUT_W - ROT_BITS;    // 27

  typedef logic [STATE_W-1:0] state_t;
  typedef logic [OUT_W-1:0]   rnd_t;
  typedef logic [DEC_W-1:0]   dec_seed_t;

  // Coefficients of one affine LCG map x -> mul * x + add (mod 2^64).
  typedef struct packed {
    state_t mul;
    state_t add;
  } lcg_coef_t;

  // Coefficients of k successive LCG steps: x[n+k] = mul * x[n] + add.
  function automatic lcg_coef_t lcg_advance(input state_t a, input state_t c, input int unsigned k);
    lcg_coef_t r;
    r.mul = 64'd1;
    r.add = 64'd0;
    for (int unsigned i = 0; i < k; i++) begin
      // apply one more step after the current map: a*(mul*x + add) + c
      r.mul = a * r.mul;
      r.add = a * r.add + c;
    end
    return r;
  endfunction

  // Leaf-transition constant of output unit i. Any set of distinct even constants works;
  // even values keep every leaf sequence at full period when c is odd.
  function automatic state_t leaf_h(input int unsigned i);
    return state_t'(2 * (64'(i) + 64'd1));
  endfunction

endpackage
