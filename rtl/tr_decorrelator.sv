// tr_decorrelator: xorshift128 decorrelator of one output unit.
//
// Streams of one LCG family that differ only in their increment are strongly correlated.
// Each output unit therefore XORs its permuted LCG value with the output of a generator
// of a completely different kind, Marsaglia's xorshift128 (four 32-bit words, period
// 2^128 - 1, only shifts and XORs). If every unit's xorshift128 starts at its own point of
// the xorshift sequence (substreams 2^64 steps apart, computed by the host), the XORed
// streams are pairwise decorrelated.
//
// Per valid input the generator takes one step
//   t = x ^ (x << 11);  x, y, z <= y, z, w;  w <= w ^ (w >> 19) ^ t ^ (t >> 8)
// and the new w is the decorrelation word k; the output is rnd = perm_in ^ k.
//
// Interface: `load` writes `seed` ({x, y, z, w}, x in the top word) and takes priority
// over `in_valid`. An all-zero seed, which xorshift would never leave, is replaced by a
// fixed nonzero constant. Timing: rnd/out_valid are registered, one cycle after in_valid.
//
// From the published design: xorshift128 with period 2^128 - 1 and the XOR combination.
// The shift triple (11, 8, 19) is Marsaglia's; the seed port and zero-seed guard are this
// design's choice.
module tr_decorrelator
  import thundering_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      load,
  input  dec_seed_t seed,
  input  logic      in_valid,
  input  rnd_t      perm_in,
  output logic      out_valid,
  output rnd_t      rnd
);

  localparam dec_seed_t ZERO_SEED_SUBST = 128'h075bcd15_159a55e5_1f123bb5_05491333;

  logic [31:0] x, y, z, w;
  logic [31:0] t, w_next;

  always_comb begin
    t      = x ^ (x << 11);
    w_next = w ^ (w >> 19) ^ t ^ (t >> 8);
  end

  always_ff @(posedge clk) begin
    if (load) begin
      {x, y, z, w} <= (seed == '0) ? ZERO_SEED_SUBST : seed;
    end else if (in_valid) begin
      x <= y;
      y <= z;
      z <= w;
      w <= w_next;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || load) out_valid <= 1'b0;
    else                out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    rnd <= perm_in ^ w_next;
  end

endmodule
