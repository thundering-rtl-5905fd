// tr_permutation: output function g of one output unit, 64-bit leaf state -> 32-bit number.
//
// The low bits of a power-of-two LCG are weak, so the state is not output directly. The
// function is O'Neill's "xorshift high, random rotation" (XSH-RR): the state is folded
// onto itself (w ^ (w >> 18)), the 32 bits below the top five are kept
// ((...) >> 27, truncated), and that word is rotated right by the number held in the top
// five state bits (w >> 59). Since every output unit has a different leaf state, every
// stream rotates differently.
//
// Pipeline (one result per cycle, latency 3):
//   stage 1  scrambled word and rotation count from the leaf state,
//   stage 2  the rotation split into a right-shift and a left-shift amount,
//   stage 3  both shifts done in parallel and ORed: rotr(x, r) = (x >> r) | (x << (-r & 31)).
//
// From the published design: a random-rotation permutation in the style of O'Neill, the
// rotation count taken from the leaf state, and the three-stage split. The exact XSH-RR
// constants come from O'Neill's generator, not from the published design.
module tr_permutation
  import thundering_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  state_t leaf_state,
  output logic   out_valid,
  output rnd_t   perm_out
);

  typedef logic [ROT_BITS-1:0] rot_t;

  // stage 1
  rnd_t s1_word;
  rot_t s1_rot;
  // stage 2
  rnd_t s2_word;
  rot_t s2_rsh, s2_lsh;

  logic [2:0] vld;

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[1:0], in_valid};
  end

  always_ff @(posedge clk) begin
    s1_word  <= rnd_t'((leaf_state ^ (leaf_state >> XSHIFT)) >> BOTTOMSPARE);
    s1_rot   <= leaf_state[STATE_W-1 -: ROT_BITS];

    s2_word  <= s1_word;
    s2_rsh   <= s1_rot;
    s2_lsh   <= rot_t'(-s1_rot);

    perm_out <= (s2_word >> s2_rsh) | (s2_word << s2_lsh);
  end

  assign out_valid = vld[2];

endmodule
