// tr_sou: sequence output unit, producing one independent 32-bit random stream.
//
// The unit receives the shared root state x[n] from its predecessor on the daisy chain,
// registers it, and forwards that register to its successor, so no signal fans out to all
// units and each hop adds one cycle. From the same register it computes its stream:
//   leaf state     w[n] = x[n] + H                         (tr_lsgu, 1 cycle)
//   permutation    g(w[n]), 64 -> 32 bits, XSH-RR           (tr_permutation, 3 cycles)
//   decorrelation  z[n] = g(w[n]) ^ k[n], k from xorshift128 (tr_decorrelator, 1 cycle)
//
// Interface: chain_in/chain_in_valid from the previous unit (or the root unit), chain_out/
// chain_out_valid to the next. `start` loads `dec_seed` into the decorrelator and flushes
// every valid bit of the unit. rnd/rnd_valid carry one random number per cycle while the
// root stream runs. Timing: rnd for root state x[n] appears 6 cycles after x[n] is on
// chain_in (1 hop + 1 LSGU + 3 permutation + 1 decorrelator).
//
// The chain topology and the LSGU -> permutation -> decorrelator order are from the
// published design; the one-register hop and the start/flush protocol are this design's.
module tr_sou
  import thundering_pkg::*;
#(
  parameter state_t H = 64'd2
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  dec_seed_t dec_seed,
  input  logic      chain_in_valid,
  input  state_t    chain_in,
  output logic      chain_out_valid,
  output state_t    chain_out,
  output logic      rnd_valid,
  output rnd_t      rnd
);

  logic   flush_n;
  logic   leaf_valid, perm_valid;
  state_t leaf_state;
  rnd_t   perm_out;

  assign flush_n = rst_n & ~start;

  // daisy-chain hop
  always_ff @(posedge clk) begin
    if (!flush_n) chain_out_valid <= 1'b0;
    else          chain_out_valid <= chain_in_valid;
  end

  always_ff @(posedge clk) begin
    chain_out <= chain_in;
  end

  tr_lsgu #(.H(H)) u_lsgu (
    .clk        (clk),
    .rst_n      (flush_n),
    .in_valid   (chain_out_valid),
    .root_state (chain_out),
    .out_valid  (leaf_valid),
    .leaf_state (leaf_state)
  );

  tr_permutation u_perm (
    .clk        (clk),
    .rst_n      (flush_n),
    .in_valid   (leaf_valid),
    .leaf_state (leaf_state),
    .out_valid  (perm_valid),
    .perm_out   (perm_out)
  );

  tr_decorrelator u_dec (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (start),
    .seed      (dec_seed),
    .in_valid  (perm_valid),
    .perm_in   (perm_out),
    .out_valid (rnd_valid),
    .rnd       (rnd)
  );

endmodule
