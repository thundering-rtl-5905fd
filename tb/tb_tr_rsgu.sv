// tb_tr_rsgu: checks the root unit against a single-step LCG model. After `start`, the
// first root state x[0] must appear MAC_LAT+1 = 7 cycles later and x[1], x[2], ... must
// follow on every cycle without a gap (one state per cycle). A second start with another
// seed, issued mid-stream, must restart the sequence with the same latency.
module tb_tr_rsgu;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  localparam int unsigned LAT = 6;
  localparam int unsigned NOUT = 200;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  state_t seed, root_state;
  logic root_valid;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  tr_rsgu dut (.*);

  task automatic run(input state_t s0);
    longint unsigned x = s0;
    int start_cycle;
    @(negedge clk); seed = s0; start = 1'b1;
    @(posedge clk); start_cycle = cycle;
    @(negedge clk); start = 1'b0;
    do begin @(posedge clk); #1; end while (!root_valid && cycle < start_cycle + 50);
    checks++;
    if (cycle - start_cycle != LAT + 1) begin
      failures++; $display("FAIL: first root state after %0d cycles, expected %0d", cycle - start_cycle, LAT + 1);
    end
    for (int n = 0; n < NOUT; n++) begin
      checks++;
      if (!root_valid || root_state !== x) begin
        failures++; $display("FAIL: n=%0d valid=%0b got %h exp %h", n, root_valid, root_state, x);
      end
      x = lcg_next(x);
      @(posedge clk); #1;
    end
  endtask

  initial begin
    seed = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(64'h243f6a8885a308d3);
    run(64'd42);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
