// tr_merger: serialises the states of the root unit's parallel generators.
//
// The N_GEN state generators of the root unit work in lockstep: every N_GEN cycles they
// deliver N_GEN consecutive LCG states x[6k] .. x[6k+5] at once (`in_valid`, `in_state`,
// index j = generator j). The merger emits them in sequence order, one per cycle, as the
// root state stream. It is a parallel-load shift register: on `in_valid` it outputs
// in_state[0] on the next cycle and keeps in_state[1..N_GEN-1], which it shifts out over
// the following N_GEN-1 cycles. Because the generators deliver every N_GEN cycles, the
// output is valid on every cycle once running.
//
// Timing: out_state/out_valid are registered, one cycle after in_valid for element 0.
// `clear` (used on restart) drops anything buffered. A new load while elements remain
// buffered would drop them; an assertion flags it.
//
// The published design gives the merger's function and its output order; the
// shift-register structure is this design's choice.
module tr_merger
  import thundering_pkg::*;
#(
  parameter int unsigned N_GEN = MAC_LAT_DEFAULT
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   in_valid,
  input  state_t in_state [N_GEN],
  output logic   out_valid,
  output state_t out_state
);

  state_t                      buffer [N_GEN-1];
  logic [$clog2(N_GEN+1)-1:0]  left;   // buffered elements still to emit

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      left      <= '0;
      out_valid <= 1'b0;
    end else if (in_valid) begin
      left      <= ($bits(left))'(N_GEN - 1);
      out_valid <= 1'b1;
    end else if (left != 0) begin
      left      <= left - 1'b1;
      out_valid <= 1'b1;
    end else begin
      out_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_state <= in_state[0];
      for (int unsigned j = 0; j < N_GEN - 1; j++) buffer[j] <= in_state[j+1];
    end else begin
      out_state <= buffer[0];
      for (int unsigned j = 0; j < N_GEN - 2; j++) buffer[j] <= buffer[j+1];
    end
  end

  // A new group must not arrive before the previous one has been emitted.
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n || clear)
                                 in_valid |-> left == 0)
    else $error("merger overrun: new states arrived while %0d were still buffered", left);

endmodule
