// tb_pi_estimation: the generator driving a Monte Carlo estimate of pi.
//
// Each draw takes two consecutive 32-bit numbers (u, v) of one stream as a point in the
// unit square, scaled by 2^-32, and counts it as inside the quarter circle when
// u^2 + v^2 < 2^64. With 16 streams and 4096 draws per stream (65536 draws), the estimate
// 4*inside/draws has a standard deviation of about 0.0064; the test requires it to be
// within 0.04 of pi, and the inside count to equal exactly the count obtained from
// independent models of the streams (LCG, XSH-RR, xorshift128). It also checks that the
// 16 streams differ from one another.
module tb_pi_estimation;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  localparam int N     = 16;
  localparam int DRAWS = 4096;   // per stream

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  state_t    root_seed = '0;
  dec_seed_t dec_seed [N];
  logic      rnd_valid [N];
  rnd_t      rnd [N];

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  thundering_top #(.N_SOU(N)) dut (.*);

  longint unsigned inside_hw = 0, inside_ref = 0;
  int              nnum [N];
  rnd_t            first_u [N];
  rnd_t            half [N];
  xs_state_t       st [N];
  longint unsigned xr [N];
  rnd_t            rhalf [N];

  function automatic logic in_circle(input rnd_t u, input rnd_t v);
    logic [64:0] s;
    s = 65'(64'(u) * 64'(u)) + 65'(64'(v) * 64'(v));
    return s[64] == 1'b0;
  endfunction

  always @(posedge clk) begin
    #1;
    for (int i = 0; i < N; i++) begin
      if (rst_n && rnd_valid[i] && nnum[i] < 2 * DRAWS) begin
        rnd_t e;
        e = xsh_rr(xr[i] + 64'(2 * (i + 1))) ^ xs128_next(st[i]);
        xr[i] = lcg_next(xr[i]);
        if (nnum[i] == 0) first_u[i] = rnd[i];
        if (nnum[i] % 2 == 0) begin
          half[i] = rnd[i]; rhalf[i] = e;
        end else begin
          if (in_circle(half[i], rnd[i])) inside_hw++;
          if (in_circle(rhalf[i], e))     inside_ref++;
        end
        nnum[i]++;
      end
    end
  end

  initial begin
    real pi_est;
    int  dup;
    foreach (dec_seed[i]) begin
      longint unsigned s1, s2;
      s1 = splitmix(64'(2 * i)); s2 = splitmix(64'(2 * i + 1));
      dec_seed[i] = {s1, s2};
      {st[i][0], st[i][1], st[i][2], st[i][3]} = dec_seed[i];
      nnum[i] = 0;
      xr[i] = 64'h853c49e6748fea9b;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); start = 1'b1; root_seed = 64'h853c49e6748fea9b;
    @(negedge clk); start = 1'b0;
    wait (nnum[N-1] == 2 * DRAWS);
    @(negedge clk);
    pi_est = 4.0 * real'(inside_hw) / real'(N * DRAWS);
    $display("pi estimate = %f from %0d draws (%0d inside)", pi_est, N * DRAWS, inside_hw);
    checks++;
    if (inside_hw != inside_ref) begin failures++; $display("FAIL: inside count %0d, model %0d", inside_hw, inside_ref); end
    checks++;
    if (pi_est < 3.10159 || pi_est > 3.18159) begin failures++; $display("FAIL: estimate out of range"); end
    dup = 0;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++) if (first_u[i] == first_u[j]) dup++;
    checks++;
    if (dup != 0) begin failures++; $display("FAIL: %0d stream pairs start identically", dup); end
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
