// tb_option_pricing: the generator driving a Monte Carlo price of a European call option
// under the Black-Scholes model.
//
// Each stream supplies pairs of 32-bit uniforms that a Box-Muller transform turns into
// standard normal draws g; each draw prices one path, S_T = S0*exp((r - s^2/2)T + s*sqrt(T)*g),
// with payoff max(S_T - K, 0) discounted by exp(-rT). The option (S0 = K = 100, r = 0.05,
// sigma = 0.2, T = 1) has the closed-form price 10.4506; with 16 streams x 2048 pairs x 2
// draws = 65536 paths the Monte Carlo standard error is about 0.06, and the test requires
// the estimate within 0.35 of the closed form. The option parameters are a textbook
// example, chosen for this test.
module tb_option_pricing;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  localparam int N     = 16;
  localparam int PAIRS = 2048;   // per stream

  localparam real S0 = 100.0, K = 100.0, R = 0.05, SIG = 0.2, T = 1.0;
  localparam real BS_PRICE = 10.4506;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  state_t    root_seed = '0;
  dec_seed_t dec_seed [N];
  logic      rnd_valid [N];
  rnd_t      rnd [N];

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  thundering_top #(.N_SOU(N)) dut (.*);

  int   nnum [N];
  rnd_t u1 [N];
  real  payoff_sum = 0.0;
  int   paths = 0;

  function automatic real payoff(input real g);
    real st;
    st = S0 * $exp((R - 0.5 * SIG * SIG) * T + SIG * $sqrt(T) * g);
    return (st > K) ? st - K : 0.0;
  endfunction

  always @(posedge clk) begin
    #1;
    for (int i = 0; i < N; i++) begin
      if (rst_n && rnd_valid[i] && nnum[i] < 2 * PAIRS) begin
        if (nnum[i] % 2 == 0) u1[i] = rnd[i];
        else begin
          real a, b, rad;
          a   = (real'(u1[i]) + 0.5) / 4294967296.0;    // (0,1)
          b   = (real'(rnd[i]) + 0.5) / 4294967296.0;
          rad = $sqrt(-2.0 * $ln(a));
          payoff_sum += payoff(rad * $cos(TWO_PI * b)) + payoff(rad * $sin(TWO_PI * b));
          paths += 2;
        end
        nnum[i]++;
      end
    end
  end

  initial begin
    real price;
    foreach (dec_seed[i]) begin
      dec_seed[i] = {splitmix(64'(7 * i + 3)), splitmix(64'(7 * i + 4))};
      nnum[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); start = 1'b1; root_seed = 64'h0000_0000_dead_beef;
    @(negedge clk); start = 1'b0;
    wait (nnum[N-1] == 2 * PAIRS);
    @(negedge clk);
    price = $exp(-R * T) * payoff_sum / real'(paths);
    $display("MC call price = %f from %0d paths (closed form %f)", price, paths, BS_PRICE);
    checks++;
    if (paths != 2 * N * PAIRS) begin failures++; $display("FAIL: %0d paths", paths); end
    checks++;
    if (price < BS_PRICE - 0.35 || price > BS_PRICE + 0.35) begin failures++; $display("FAIL: price off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
