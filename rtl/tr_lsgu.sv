// tr_lsgu: leaf state generation unit of one output unit.
//
// Each output unit turns the shared root state x[n] into its own LCG sequence by adding a
// unique constant: w[n] = (x[n] + H) mod 2^64. Because (x + h) obeys an LCG recurrence with
// the same multiplier but a different increment (c - a*h), every distinct H yields a
// distinct sequence of the same LCG family, at the cost of one adder instead of one
// multiplier per stream. An even H keeps the leaf sequence at full period when the root
// increment is odd.
//
// Timing: one register stage; out_valid/leaf_state follow in_valid/root_state by one cycle.
// The adder is from the published design; the register stage and the choice of H
// (set by the instantiating unit, 2*(i+1) for unit i) are this design's.
module tr_lsgu
  import thundering_pkg::*;
#(
  parameter state_t H = 64'd2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  state_t root_state,
  output logic   out_valid,
  output state_t leaf_state
);

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    leaf_state <= root_state + H;   // mod 2^64 by truncation
  end

endmodule
