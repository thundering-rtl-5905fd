// tr_rsgu: root state generation unit, one LCG state per clock cycle.
//
// The LCG recurrence x[n+1] = (a*x[n] + c) mod 2^64 cannot issue one multiply per cycle
// when the multiplier takes MAC_LAT cycles, because each state depends on the previous
// one. The unit therefore runs N_GEN = MAC_LAT independent state generators that each
// apply the advance-N_GEN recurrence x[n+6] = A6*x[n] + C6: generator j produces
// x[j], x[j+6], x[j+12], ... All generators work in lockstep, so every six cycles six
// consecutive states appear together, and the merger emits them in order, one per cycle.
//
// Start-up: a one-cycle `start` loads `seed` (= x[0]) into every generator. On this first
// pass generator j multiplies with the advance-j coefficients (a^j, c*(1+...+a^(j-1))), so
// it yields x[j]; afterwards all use the advance-6 pair. All coefficients are constants
// computed at elaboration.
//
// Timing: root_valid rises MAC_LAT+1 cycles after `start` (MAC_LAT cycles of MAC, one of
// merger) and stays high, giving x[0], x[1], x[2], ... on consecutive cycles.
// `start` may be repeated to restart from a new seed.
//
// From the published design: six generators for a six-cycle MAC, advance-6 recurrence
// with compile-time coefficients, merger in sequence order, a = 6364136223846793005,
// c = 54, m = 2^64. This design's choice: how the generators are seeded, and the
// start/valid protocol.
module tr_rsgu
  import thundering_pkg::*;
#(
  parameter int unsigned N_GEN   = MAC_LAT_DEFAULT,
  parameter int unsigned MAC_LAT = MAC_LAT_DEFAULT,
  parameter state_t      LCG_A   = LCG_A_DEFAULT,
  parameter state_t      LCG_C   = LCG_C_DEFAULT
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  state_t seed,
  output logic   root_valid,
  output state_t root_state
);

  localparam lcg_coef_t STEP = lcg_advance(LCG_A, LCG_C, N_GEN);

  state_t gen_state [N_GEN];
  logic   gen_valid [N_GEN];

  for (genvar j = 0; j < N_GEN; j++) begin : g_gen
    localparam lcg_coef_t FIRST = lcg_advance(LCG_A, LCG_C, j);
    tr_state_generator #(.MAC_LAT(MAC_LAT)) u_gen (
      .clk         (clk),
      .rst_n       (rst_n),
      .load        (start),
      .seed        (seed),
      .a_first     (FIRST.mul),
      .c_first     (FIRST.add),
      .a_step      (STEP.mul),
      .c_step      (STEP.add),
      .state       (gen_state[j]),
      .state_valid (gen_valid[j])
    );
  end

  tr_merger #(.N_GEN(N_GEN)) u_merger (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (start),
    .in_valid  (gen_valid[0]),
    .in_state  (gen_state),
    .out_valid (root_valid),
    .out_state (root_state)
  );

  initial assert (N_GEN == MAC_LAT)
    else $error("N_GEN (%0d) must equal MAC_LAT (%0d) for one state per cycle", N_GEN, MAC_LAT);

  // The generators run in lockstep.
  for (genvar j = 1; j < N_GEN; j++) begin : g_chk
    a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) gen_valid[j] == gen_valid[0])
      else $error("state generator %0d out of step", j);
  end

endmodule
