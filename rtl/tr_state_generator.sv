// tr_state_generator: one advance-k LCG state generator of the root unit.
//
// It holds one 64-bit LCG state and replaces it, every MAC_LAT cycles, by
// state' = (mul * state + add) mod 2^64. The multiply-accumulate (MAC) is pipelined over
// MAC_LAT register stages, as a DSP-based multiplier would be; the modulus unit is a
// truncation of the product to 64 bits because the modulus is 2^64. The last pipeline
// register is the state register: its value is both the generator's output and the
// operand of the next MAC, so one state occupies the pipeline at a time and a new state
// appears exactly MAC_LAT cycles after the previous one.
//
// Interface: a one-cycle `load` starts a fresh sequence from `seed`. The first MAC after
// `load` uses (a_first, c_first); every later one uses (a_step, c_step). In the root unit
// generator j gets a_first/c_first = advance-j coefficients, so its first output is x[j],
// and a_step/c_step = advance-MAC_LAT coefficients, so it then produces x[j+6], x[j+12]...
// Timing: `state_valid` pulses MAC_LAT cycles after `load` and every MAC_LAT cycles
// thereafter, with `state` held stable in between.
//
// The six-stage MAC latency, the MAC/MOD/state-register structure and the feedback are
// from the published design; the way the first states x[1]..x[5] are obtained (using the
// generator's own MAC with different coefficients on its first pass) is this design's
// choice. Synthesis tools are expected to retime the single 64x64 multiply across the
// pipeline registers into DSP stages.
module tr_state_generator
  import thundering_pkg::*;
#(
  parameter int unsigned MAC_LAT = MAC_LAT_DEFAULT
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  state_t seed,
  input  state_t a_first,
  input  state_t c_first,
  input  state_t a_step,
  input  state_t c_step,
  output state_t state,
  output logic   state_valid
);

  state_t                   pipe  [MAC_LAT];
  logic     [MAC_LAT-1:0]   vld;

  // MAC issue: either the seed (first pass) or the fed-back state.
  logic   issue;
  state_t operand, mul, add, mac;

  always_comb begin
    issue   = load | vld[MAC_LAT-1];
    operand = load ? seed    : pipe[MAC_LAT-1];
    mul     = load ? a_first : a_step;
    add     = load ? c_first : c_step;
    mac     = mul * operand + add;        // MOD: the 64-bit truncation is mod 2^64
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld <= '0;
    end else begin
      vld[0] <= issue;
      for (int unsigned s = 1; s < MAC_LAT; s++) vld[s] <= vld[s-1] & ~load;
    end
  end

  always_ff @(posedge clk) begin
    pipe[0] <= mac;
    for (int unsigned s = 1; s < MAC_LAT; s++) pipe[s] <= pipe[s-1];
  end

  assign state       = pipe[MAC_LAT-1];
  assign state_valid = vld[MAC_LAT-1];

  initial assert (MAC_LAT >= 2) else $error("MAC_LAT must be at least 2");

endmodule
