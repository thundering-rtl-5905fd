// tb_tr_permutation: streams random leaf states (plus states with every rotation count
// 0..31) through the permutation and checks each output against an XSH-RR model, its
// 3-cycle latency and one result per cycle.
module tb_tr_permutation;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  localparam int NIN = 400;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  state_t leaf_state = '0;
  rnd_t perm_out;
  int checks = 0, failures = 0, cycle = 0;
  int unsigned expq[$];
  int incyc[$];

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  tr_permutation dut (.*);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NIN; n++) begin
      @(negedge clk);
      in_valid   = 1'b1;
      leaf_state = (n < 32) ? {5'(n), 59'($urandom) ^ 59'({$urandom, $urandom})} : {$urandom, $urandom};
      expq.push_back(xsh_rr(leaf_state));
      incyc.push_back(cycle);
    end
    @(negedge clk) in_valid = 1'b0;
  end

  initial begin
    int got = 0;
    @(posedge rst_n);
    while (got < NIN) begin
      @(posedge clk); #1;
      if (out_valid) begin
        int unsigned e; int c;
        e = expq.pop_front(); c = incyc.pop_front();
        checks++;
        if (perm_out !== e) begin failures++; $display("FAIL: out %0d got %h exp %h", got, perm_out, e); end
        checks++;
        if (cycle - c != 3) begin failures++; $display("FAIL: latency %0d", cycle - c); end
        got++;
      end
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
