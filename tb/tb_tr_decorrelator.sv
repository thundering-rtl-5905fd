// tb_tr_decorrelator: loads a seed, drives random permuted words with a random valid
// pattern and checks rnd = perm ^ k against an xorshift128 model that advances only on
// valid inputs. Also checks the one-cycle latency of out_valid, a reload mid-stream, and
// that an all-zero seed does not lock the generator at zero.
module tb_tr_decorrelator;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, in_valid = 1'b0, out_valid;
  dec_seed_t seed = '0;
  rnd_t perm_in = '0, rnd;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  tr_decorrelator dut (.*);

  task automatic run(input dec_seed_t s, input int n);
    xs_state_t st;
    st[0] = s[127:96]; st[1] = s[95:64]; st[2] = s[63:32]; st[3] = s[31:0];
    @(negedge clk); load = 1'b1; seed = s; in_valid = 1'b0;
    @(negedge clk); load = 1'b0;
    for (int i = 0; i < n; i++) begin
      int unsigned p; logic v; int unsigned e;
      v = ($urandom % 3) != 0;
      p = $urandom;
      in_valid = v; perm_in = p;
      if (v) e = p ^ xs128_next(st);
      @(posedge clk); #1;
      checks++;
      if (out_valid !== v) begin failures++; $display("FAIL: valid %0b exp %0b", out_valid, v); end
      if (v) begin
        checks++;
        if (rnd !== e) begin failures++; $display("FAIL: step %0d got %h exp %h", i, rnd, e); end
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(128'h0123456789abcdef_fedcba9876543210, 300);
    run({$urandom, $urandom, $urandom, $urandom}, 300);
    // zero seed: outputs must not stay equal to the input
    begin
      int same = 0;
      @(negedge clk); load = 1'b1; seed = '0;
      @(negedge clk); load = 1'b0;
      for (int i = 0; i < 20; i++) begin
        in_valid = 1'b1; perm_in = 32'h0;
        @(posedge clk); #1;
        if (rnd == 32'h0) same++;
        @(negedge clk);
      end
      in_valid = 1'b0;
      checks++;
      if (same > 2) begin failures++; $display("FAIL: zero seed gives zero stream"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
