// tb_tr_merger: feeds groups of six random states every six cycles and checks that they
// come out one per cycle, in index order, one cycle after the group arrives, with no gap
// between groups; then stops feeding and checks that the output goes idle, and that
// `clear` drops a half-emitted group.
module tb_tr_merger;
  import thundering_pkg::*;

  localparam int unsigned N = 6;
  localparam int unsigned GROUPS = 10;

  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0;
  state_t in_state [N];
  logic out_valid;
  state_t out_state;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tr_merger #(.N_GEN(N)) dut (.*);

  state_t expq[$];

  // driver
  initial begin
    foreach (in_state[j]) in_state[j] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int g = 0; g < GROUPS; g++) begin
      @(negedge clk);
      in_valid = 1'b1;
      foreach (in_state[j]) begin
        in_state[j] = {$urandom, $urandom};
        expq.push_back(in_state[j]);
      end
      @(negedge clk) in_valid = 1'b0;
      repeat (N - 2) @(negedge clk);
    end
  end

  // monitor: from the first output on, valid must stay high for GROUPS*N cycles
  initial begin
    int n = 0;
    @(posedge rst_n);
    do begin @(posedge clk); #1; end while (!out_valid);
    for (n = 0; n < GROUPS * N; n++) begin
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: gap at output %0d", n); end
      else begin
        state_t e;
        e = expq.pop_front();
        checks++;
        if (out_state !== e) begin failures++; $display("FAIL: output %0d got %h exp %h", n, out_state, e); end
      end
      @(posedge clk); #1;
    end
    repeat (3) begin
      checks++;
      if (out_valid) begin failures++; $display("FAIL: valid after last group"); end
      @(posedge clk); #1;
    end
    // clear in the middle of a group
    @(negedge clk);
    in_valid = 1'b1;
    @(negedge clk) in_valid = 1'b0;
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    repeat (N) begin
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("FAIL: output after clear"); end
    end
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
