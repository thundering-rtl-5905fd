# Many independent random streams from one multiplier

This is SystemVerilog RTL for a pseudo-random number generator that produces a large number
of independent 32-bit random streams at once, one number per stream per clock cycle. The
default configuration builds 2048 streams. It follows the ThundeRiNG architecture
(Tan et al., "ThundeRiNG: Generating Multiple Independent Random Number Sequences on FPGAs").

Running one complete generator per stream is expensive. A good 64-bit generator needs a
64x64-bit multiplier in every instance, and that multiplier costs DSP slices. This design
uses a single multiplier chain for all streams, and the per-stream cost is one adder, some
shifts and XORs. Three ideas make this possible:

1. **State sharing.** One 64-bit linear congruential generator (LCG),
   `x[n+1] = (a*x[n] + c) mod 2^64`, is computed once. This is the *root state*. Stream `i`
   uses the *leaf state* `w_i[n] = x[n] + h_i` with its own constant `h_i`. Substituting
   shows that `w_i` is again an LCG with the same multiplier `a` and the increment
   `c - a*h_i (mod 2^64)`. So every `h_i` selects a different member of the same LCG family,
   at the cost of one adder.
2. **Permutation.** LCG low bits are weak. Each leaf state therefore passes through a
   "xorshift-high, random-rotate" output function (O'Neill's XSH-RR) that maps 64 bits to
   32 bits. The rotation count comes from the top bits of the leaf state, so it differs
   from stream to stream.
3. **Decorrelation.** LCGs that differ only in their increment are strongly correlated
   with each other. Each stream therefore XORs its permuted value with its own xorshift128
   generator, an algorithm unrelated to the LCG. If each xorshift128 starts at a different,
   non-overlapping point of its 2^128-1 period, the XOR removes the correlation between
   streams. The original work argues this with Yao's XOR lemma: the correlation of the XORed
   streams is about the product of the two input correlations.

```
              +--------------------- root state generation unit ---------------------+
  root_seed ->| 6 state generators (MAC -> MOD -> state reg, advance-6) -> merger      |-> x[n], 1/cycle
              +-----------------------------------------------------------------------+
                   |
                   v
   +-- SOU 0 --+   +-- SOU 1 --+          +-- SOU N-1 --+
   | hop reg   |-->| hop reg   |--> ... ->| hop reg     |        (daisy chain, 1 cycle/hop)
   | + h_0     |   | + h_1     |          | + h_{N-1}   |        leaf state generation unit
   | XSH-RR    |   | XSH-RR    |          | XSH-RR      |        permutation, 3 stages
   | ^ xs128_0 |   | ^ xs128_1 |          | ^ xs128_N-1 |        decorrelator
   +-----------+   +-----------+          +-------------+
      rnd[0]          rnd[1]                 rnd[N-1]
```

## The root state generation unit: one LCG step per cycle from a 6-cycle multiplier

This part is the hardest to follow. The LCG is a true recurrence: `x[n+1]` needs `x[n]`. A
pipelined DSP multiplier takes 6 cycles, so a single MAC could produce only one state every
6 cycles. The unit (`tr_rsgu`) instead uses the LCG's jump-ahead property. Six steps
compose into one affine map,

    x[n+6] = A6 * x[n] + C6,  A6 = a^6,  C6 = c * (1 + a + a^2 + ... + a^5)   (mod 2^64)

and this is computed by six identical *state generators* (`tr_state_generator`) running in
lockstep. Generator `j` produces `x[j], x[j+6], x[j+12], ...`. Each generator has three
parts:

- a MAC pipelined over 6 registers;
- a modulus unit, which is only truncation to 64 bits because the modulus is 2^64;
- a state register (the last pipeline register), which feeds back into the MAC.

At any time the ring holds one value in flight per generator. Every 6 cycles the six
generators together deliver six consecutive states. The *merger* (`tr_merger`) is a
parallel-load shift register. It emits those six states in order, one per cycle, and the
next group arrives exactly as the last one leaves. The result is one root state per cycle
with no gaps.

**Seeding.** A one-cycle `start` loads `root_seed` (= `x[0]`) into all six generators. On its
first pass, generator `j` uses the advance-`j` coefficients `(a^j, c*(1+...+a^(j-1)))`
instead of `(A6, C6)`, so its own MAC turns `x[0]` into `x[j]`. No extra multiplier is
needed for start-up. Every advance coefficient is a constant, computed at elaboration by
`thundering_pkg::lcg_advance`.

**Timing.** `root_valid` rises 7 cycles after `start`: 6 for the MAC and 1 for the merger.
It then stays high.

## Sequence output units and the daisy chain

Each stream has a sequence output unit, `tr_sou`. Its root-state input comes from the
previous unit's register, not from the root unit. The unit registers the state, uses the
register for its own stream, and passes the register on to the next unit. No net fans out
to all 2048 units. Each hop adds one cycle, so unit `i` runs `i` cycles behind unit 0. With
2048 units the last stream starts 2048 cycles after the first.

Inside a unit:

| stage                       | module            | cycles | operation                                      |
|-----------------------------|-------------------|--------|------------------------------------------------|
| chain hop                   | `tr_sou`          | 1      | register `x[n]`, forward it                    |
| leaf state generation unit  | `tr_lsgu`         | 1      | `w = x + h_i`, `h_i = 2*(i+1)`                 |
| permutation 1               | `tr_permutation`  | 1      | `word = ((w ^ (w>>18)) >> 27)[31:0]`, `r = w>>59` |
| permutation 2               |                   | 1      | split rotation: right amount `r`, left amount `-r mod 32` |
| permutation 3               |                   | 1      | `(word >> r) \| (word << (-r mod 32))`         |
| decorrelator                | `tr_decorrelator` | 1      | one xorshift128 step, `z = perm ^ k`           |

Root state `x[n]` reaches output `rnd[i]` at cycle `start + 7 + n + i + 6`. After the first
number, every stream gives one number per cycle.

**Why even `h_i`.** The leaf stream's increment is `c - a*h_i`. By the Hull-Dobell theorem
it has full period 2^64 when that increment is odd. Since `a` is odd, this holds for an even
`h_i` if `c` is odd.

**xorshift128.** This is Marsaglia's 32-bit four-word generator with shifts (11, 8, 19):
`t = x ^ (x<<11); x,y,z = y,z,w; w = w ^ (w>>19) ^ t ^ (t>>8)`. It steps only when a
number is produced. The 128-bit seed is `{x, y, z, w}`. An all-zero seed, which xorshift
would never leave, is replaced by a fixed nonzero constant.

## Interface of `thundering_top`

| port                | dir | type                      | meaning                                         |
|---------------------|-----|---------------------------|-------------------------------------------------|
| `clk`, `rst_n`      | in  | 1                         | clock; synchronous active-low reset              |
| `start`             | in  | 1                         | pulse: load all seeds, flush pipelines, (re)start |
| `root_seed`         | in  | 64                        | initial root state `x[0]`                        |
| `dec_seed[N_SOU]`   | in  | 128 each                  | xorshift128 start state of each unit             |
| `rnd_valid[N_SOU]`  | out | 1 each                    | number valid                                     |
| `rnd[N_SOU]`        | out | 32 each                   | the random numbers                               |

Parameters: `N_SOU` (default 2048), `MAC_LAT` (6; also the number of state generators),
`LCG_A` (6364136223846793005) and `LCG_C` (54). There is no back-pressure. Once started,
the generator runs freely and a consumer must take every number or drop it. `start` may be
pulsed again at any time to restart from new seeds.

**Seeds are the host's job.** To make the streams independent, the `dec_seed` values should
be starting points of *non-overlapping* xorshift128 substreams, for example 2^64 steps apart.
That gives up to 2^64 streams, more than the 2^63 distinct leaf constants. Computing the jump
takes a polynomial power over GF(2), which software does once. It is not built into the RTL.

## Where this RTL departs from, or adds to, the published design

- **Increment `c`.** The published parameters give `c = 54`, and the default follows that.
  The same text also says `c` is odd, which the full-period argument needs; 54 is even.
  With an even `c`, the root and leaf LCGs have a period below 2^64. For full period, set
  `LCG_C` to an odd value (O'Neill's PCG convention maps stream 54 to increment 109). The
  hardware is the same either way.
- **Output function constants.** The published design names O'Neill's random-rotation
  permutation and its three-stage split but gives no constants. The constants here
  (18, 27, 59, 32-bit output) are those of PCG's XSH-RR 64/32.
- **The MAC** is written as one 64x64 multiply-add followed by 5 pipeline registers. A
  synthesis tool is expected to retime it into DSP stages. The published design relies on
  the DSP's native 6-cycle pipeline.
- **Own choices** (not specified in the published design): the leaf constants
  `h_i = 2*(i+1)`; seeding the generators through their own first pass; the `start` / valid
  protocol and flushing; one register per chain hop and per leaf adder; the zero-seed guard;
  plain output ports. The application logic (pi estimation, option pricing) and the
  host/platform shell are not part of this RTL.
- **Advance coefficients** are computed with a plain loop instead of Brown's logarithmic
  method. For six steps the two give the same numbers.

## Files

`rtl/` holds one module or package per file:
- `thundering_pkg`: widths, LCG constants, the XSH-RR constants, `lcg_advance` and `leaf_h`;
- `tr_state_generator`, `tr_merger`, `tr_rsgu`: the root unit;
- `tr_lsgu`, `tr_permutation`, `tr_decorrelator`, `tr_sou`: one output unit;
- `thundering_top`.

`tb/` holds one self-checking testbench per module (`tb_<module>`). `tr_ref_pkg` has the
independent reference models: single-step LCG, XSH-RR via a doubled-word shift, and
xorshift128. There are also:

- `tb_thundering_top`: end to end with 16 units. It checks every number and its cycle in
  every stream across two starts, one of them with a zero seed.
- `tb_thundering_full`: the same test at the default 2048 units.
- `tb_pi_estimation`: 65,536 draws. The inside count must match the model exactly, and pi
  must come out within 0.04.
- `tb_option_pricing`: a Black-Scholes European call, S0 = K = 100, r = 5 %, sigma = 20 %,
  T = 1. It uses Box-Muller on the streams, and 65,536 paths must land within 0.35 of the
  closed-form price 10.4506.
- `tb_pairwise_correlation`: the Pearson correlation over all 28 pairs of 8 streams,
  8192 numbers each. The outputs must stay below 0.06. The plain LCG leaf states, read
  inside the units, must come out near 1. Measured values are about 0.03 for the outputs
  and 1.00 for the raw leaf states.

Each testbench prints `TB_RESULT checks=<n> failures=<m>`.

To simulate with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/thundering_pkg.sv tb/tr_ref_pkg.sv tb/tb_thundering_top.sv --top tb_thundering_top
./obj_dir/Vtb_thundering_top
```

Replace the last file and `--top` for any other testbench. At 2048 units the C++ build of
`tb_thundering_full` takes several minutes; the simulation itself takes well under a second.

## How far it can be trusted

The test comparisons show that the RTL computes exactly the intended functions, bit for bit
and cycle by cycle: LCG, advance-6 merging, leaf addition, XSH-RR, xorshift128 and the chain
timing. Each testbench has also been shown to fail on a deliberately broken copy of its
module. The workload tests give sensible pi and option-price estimates.

The statistical quality of the streams has not been re-measured beyond the small Pearson
test above. That leaves out the TestU01/PractRand results, the full pairwise-correlation
figures and the Hamming-weight results reported for the original design. Quality depends
on the host choosing non-overlapping xorshift128 substreams and an odd increment. No FPGA timing closure was attempted. The
published design reached 355 MHz with 2048 units.
