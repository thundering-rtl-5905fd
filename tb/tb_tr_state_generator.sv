// tb_tr_state_generator: checks one advance-6 state generator against a single-step LCG.
// The generator is seeded with x[0] and first-pass coefficients that advance by J, so it
// must produce x[J], x[J+6], x[J+12], ... with state_valid exactly every MAC_LAT cycles,
// the first one MAC_LAT cycles after load. A restart with a new seed is also checked.
module tb_tr_state_generator;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  localparam int unsigned LAT = 6;
  localparam int unsigned J   = 3;
  localparam int unsigned NOUT = 20;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  state_t seed, a_first, c_first, a_step, c_step, state;
  logic state_valid;
  int checks = 0, failures = 0;
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  tr_state_generator #(.MAC_LAT(LAT)) dut (.*);

  // coefficients of k steps, built by composing the single-step map
  function automatic void coef(input int k, output state_t m, output state_t c);
    m = 1; c = 0;
    repeat (k) begin m = m * A; c = c * A + C; end
  endfunction

  task automatic run(input state_t s0);
    longint unsigned ref_x [0:J + 6*NOUT];
    int got = 0, load_cycle, last_cycle;
    ref_x[0] = s0;
    for (int i = 1; i <= J + 6*NOUT; i++) ref_x[i] = lcg_next(ref_x[i-1]);
    @(negedge clk); seed = s0; load = 1'b1;
    @(posedge clk); load_cycle = cycle;
    @(negedge clk); load = 1'b0;
    while (got < NOUT) begin
      @(posedge clk); #1;
      if (state_valid) begin
        checks++;
        if (state !== ref_x[J + 6*got]) begin
          failures++; $display("FAIL: out %0d got %h exp %h", got, state, ref_x[J + 6*got]);
        end
        checks++;
        if ((got == 0 && cycle - load_cycle != LAT) || (got > 0 && cycle - last_cycle != LAT)) begin
          failures++; $display("FAIL: out %0d at wrong cycle %0d (load %0d, last %0d)", got, cycle, load_cycle, last_cycle);
        end
        last_cycle = cycle;
        got++;
      end
    end
  endtask

  initial begin
    coef(J, a_first, c_first);
    coef(LAT, a_step, c_step);
    seed = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(64'h0123456789abcdef);
    // restart in the middle of a run
    repeat (2) @(posedge clk);
    run(64'hfedcba9876543210);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
