// thundering_top: multi-stream random number generator, N_SOU 32-bit numbers per cycle.
//
// One root state generation unit (tr_rsgu) produces one 64-bit LCG state per cycle with a
// single multiplier chain. The state travels down a daisy chain of N_SOU sequence output
// units (tr_sou); unit i derives its own LCG stream by adding the even constant
// H_i = 2*(i+1), scrambles it with a random-rotation permutation and XORs it with its own
// xorshift128 stream. The number of multipliers is therefore fixed however many streams
// are built, while every unit still delivers one random number per cycle.
//
// Interface (plain ports):
//   start        one-cycle pulse: loads root_seed (x[0]) and every dec_seed[i], flushes
//                all pipelines; generation then runs freely.
//   root_seed    64-bit initial root state.
//   dec_seed[i]  128-bit xorshift128 state of unit i; for independent streams the host
//                gives each unit a different substream start (e.g. 2^64 steps apart).
//   rnd[i], rnd_valid[i]  stream i; valid every cycle once running.
// Timing: stream i delivers the number derived from root state x[n] at cycle
// start + (MAC_LAT + 1) + n + (i + 1) + 5, i.e. unit i lags unit i-1 by one cycle.
//
// From the published design: the RSGU/SOU split, the chain topology, and the default of
// 2048 units (the largest configuration reported), a = 6364136223846793005, c = 54,
// m = 2^64, six-cycle MAC. The seeding ports and start protocol are this design's choice.
module thundering_top
  import thundering_pkg::*;
#(
  parameter int unsigned N_SOU   = 2048,
  parameter int unsigned MAC_LAT = MAC_LAT_DEFAULT,
  parameter state_t      LCG_A   = LCG_A_DEFAULT,
  parameter state_t      LCG_C   = LCG_C_DEFAULT
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  state_t    root_seed,
  input  dec_seed_t dec_seed  [N_SOU],
  output logic      rnd_valid [N_SOU],
  output rnd_t      rnd       [N_SOU]
);

  logic   chain_valid [N_SOU+1];
  state_t chain_state [N_SOU+1];

  tr_rsgu #(
    .N_GEN   (MAC_LAT),
    .MAC_LAT (MAC_LAT),
    .LCG_A   (LCG_A),
    .LCG_C   (LCG_C)
  ) u_rsgu (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .seed       (root_seed),
    .root_valid (chain_valid[0]),
    .root_state (chain_state[0])
  );

  for (genvar i = 0; i < N_SOU; i++) begin : g_sou
    tr_sou #(.H(leaf_h(i))) u_sou (
      .clk             (clk),
      .rst_n           (rst_n),
      .start           (start),
      .dec_seed        (dec_seed[i]),
      .chain_in_valid  (chain_valid[i]),
      .chain_in        (chain_state[i]),
      .chain_out_valid (chain_valid[i+1]),
      .chain_out       (chain_state[i+1]),
      .rnd_valid       (rnd_valid[i]),
      .rnd             (rnd[i])
    );
  end

endmodule
