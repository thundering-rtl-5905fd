// tb_tr_lsgu: drives random root states (including wrap-around values near 2^64) with a
// random valid pattern and checks w = x + H mod 2^64 and the valid bit one cycle later.
module tb_tr_lsgu;
  import thundering_pkg::*;

  localparam state_t H = 64'd14;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  state_t root_state = '0, leaf_state;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tr_lsgu #(.H(H)) dut (.*);

  initial begin
    state_t x_prev;
    logic   v_prev;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid   = ($urandom % 4) != 0;
      root_state = (n % 10 == 0) ? ~state_t'($urandom % 20) : {$urandom, $urandom};
      x_prev = root_state; v_prev = in_valid;
      @(posedge clk); #1;
      checks++;
      if (out_valid !== v_prev) begin failures++; $display("FAIL: valid %0b exp %0b", out_valid, v_prev); end
      checks++;
      if (leaf_state !== x_prev + H) begin failures++; $display("FAIL: %h + H gave %h", x_prev, leaf_state); end
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
