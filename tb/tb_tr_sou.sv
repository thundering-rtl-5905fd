// tb_tr_sou: feeds one output unit an LCG root stream (one state per cycle, with an idle
// gap in the middle) and checks
//   - chain_out repeats chain_in one cycle later (daisy-chain hop),
//   - rnd equals xsh_rr(x + H) ^ k from independent models, in order,
//   - rnd appears 6 cycles after its root state entered chain_in,
//   - a start flushes the unit and reloads the decorrelator seed.
module tb_tr_sou;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  localparam state_t H = 64'd10;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  dec_seed_t dec_seed = '0;
  logic chain_in_valid = 1'b0, chain_out_valid, rnd_valid;
  state_t chain_in = '0, chain_out;
  rnd_t rnd;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  tr_sou #(.H(H)) dut (.*);

  int unsigned expq[$];
  int          cycq[$];
  xs_state_t   st;

  // chain hop check
  logic   v_d;
  state_t x_d;
  always @(posedge clk) begin v_d <= chain_in_valid; x_d <= chain_in; end
  always @(negedge clk) begin
    if (rst_n && v_d) begin
      checks++;
      if (!chain_out_valid || chain_out !== x_d) begin failures++; $display("FAIL: chain hop"); end
    end
  end

  task automatic feed(input state_t s0, input dec_seed_t ds, input int n);
    longint unsigned x = s0;
    st[0] = ds[127:96]; st[1] = ds[95:64]; st[2] = ds[63:32]; st[3] = ds[31:0];
    @(negedge clk); start = 1'b1; dec_seed = ds; chain_in_valid = 1'b0;
    @(negedge clk); start = 1'b0;
    for (int i = 0; i < n; i++) begin
      if (i == n / 2) begin chain_in_valid = 1'b0; repeat (4) @(negedge clk); end
      chain_in_valid = 1'b1; chain_in = x;
      expq.push_back(xsh_rr(x + H) ^ xs128_next(st));
      cycq.push_back(cycle);
      x = lcg_next(x);
      @(negedge clk);
    end
    chain_in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d numbers missing", expq.size()); end
    expq.delete(); cycq.delete();
  endtask

  always @(posedge clk) begin
    #1;
    if (rnd_valid) begin
      int unsigned e; int c;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL: unexpected output"); end
      else begin
        e = expq.pop_front(); c = cycq.pop_front();
        if (rnd !== e) begin failures++; $display("FAIL: got %h exp %h", rnd, e); end
        checks++;
        if (cycle - c != 6) begin failures++; $display("FAIL: latency %0d", cycle - c); end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    feed(64'h1111222233334444, 128'h00000001_00000002_00000003_00000004, 100);
    feed(64'h9999aaaabbbbcccc, {$urandom, $urandom, $urandom, $urandom}, 100);
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
