// tb_thundering_full: the end-to-end test of tb_thundering_top run on the generator at
// its default size, 2048 output units, with no parameter changed. All 2048 streams are
// checked number by number and cycle by cycle against independent LCG, XSH-RR and
// xorshift128 models over two starts (the second mid-stream, unit 1500 seeded with zero).
// The last unit's first number comes out 2048 cycles after the first unit's, which is the
// daisy-chain latency.
module tb_thundering_full;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  localparam int N     = 2048;  // the top's default
  localparam int NSTEP = 40;    // numbers checked per stream and run

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  state_t    root_seed = '0;
  dec_seed_t dec_seed [N];
  logic      rnd_valid [N];
  rnd_t      rnd [N];

  int checks = 0, failures = 0, cycle = 0;
  int n_groups = 0, n_hops = 0, n_restarts = 0, n_zero_seed = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  thundering_top dut (.*);

  // reference state per stream
  xs_state_t       st [N];
  int              cnt [N];
  longint unsigned xr [N];
  int              start_cycle;
  logic            running = 1'b0;

  // advance-6 groups entering the merger
  always @(posedge clk) if (rst_n && dut.u_rsgu.g_gen[0].u_gen.state_valid) n_groups++;

  task automatic do_start(input state_t s0, input int zero_unit);
    @(negedge clk);
    start = 1'b1;
    root_seed = s0;
    foreach (dec_seed[i]) begin
      dec_seed[i] = (i == zero_unit) ? '0 : {$urandom, $urandom, $urandom, $urandom};
      if (dec_seed[i] == '0) begin
        dec_seed[i] = '0;
        n_zero_seed++;
        {st[i][0], st[i][1], st[i][2], st[i][3]} = 128'h075bcd15_159a55e5_1f123bb5_05491333;
      end else begin
        {st[i][0], st[i][1], st[i][2], st[i][3]} = dec_seed[i];
      end
      cnt[i] = 0;
      xr[i]  = s0;
    end
    @(posedge clk);
    start_cycle = cycle;
    running = 1'b1;
    n_restarts++;
    @(negedge clk) start = 1'b0;
  endtask

  always @(posedge clk) begin
    #1;
    if (running && !start) begin
      for (int i = 0; i < N; i++) begin
        if (rnd_valid[i]) begin
          int unsigned e;
          e = xsh_rr(xr[i] + 64'(2 * (i + 1))) ^ xs128_next(st[i]);
          checks++;
          if (rnd[i] !== e) begin
            failures++;
            if (failures < 10) $display("FAIL: stream %0d n=%0d got %h exp %h", i, cnt[i], rnd[i], e);
          end
          checks++;
          if (cycle != start_cycle + 13 + cnt[i] + i) begin
            failures++;
            if (failures < 10) $display("FAIL: stream %0d n=%0d at cycle %0d exp %0d", i, cnt[i], cycle - start_cycle, 13 + cnt[i] + i);
          end else if (i > 0 && cnt[i] == 0) begin
            n_hops++;   // first number of unit i one cycle after unit i-1
          end
          xr[i] = lcg_next(xr[i]);
          cnt[i]++;
        end
      end
    end
  end

  initial begin
    foreach (dec_seed[i]) dec_seed[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    do_start(64'hcafef00dd15ea5e5, -1);
    wait (cnt[N-1] >= NSTEP);
    do_start(64'd1, 1500);                // restart mid-stream, unit 5 gets a zero seed
    wait (cnt[N-1] >= NSTEP);
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (cnt[i] < NSTEP) begin failures++; $display("FAIL: stream %0d produced only %0d", i, cnt[i]); end
    end
    $display("mechanisms: merged_groups=%0d chain_hops=%0d restarts=%0d zero_seed=%0d",
             n_groups, n_hops, n_restarts, n_zero_seed);
    checks += 4;
    if (n_groups == 0)    begin failures++; $display("FAIL: no advance-6 group merged"); end
    if (n_hops == 0)      begin failures++; $display("FAIL: no chain hop observed"); end
    if (n_restarts < 2)   begin failures++; $display("FAIL: no restart"); end
    if (n_zero_seed == 0) begin failures++; $display("FAIL: zero seed not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
