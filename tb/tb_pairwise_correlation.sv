// tb_pairwise_correlation: inter-stream Pearson correlation, decorrelated versus raw.
//
// With 8 output units running, 8192 numbers of every stream are collected and the Pearson
// correlation of every pair of streams is computed, for
//   - the generator's outputs rnd[i], which must be uncorrelated: max |rho| < 0.06
//     (about 5 standard deviations of 1/sqrt(8192)), and
//   - the baseline of plain LCG leaf states (top 32 bits of w_i = x + h_i, read from inside
//     each unit), which must show the strong correlation the decorrelator removes:
//     min |rho| > 0.9.
// Numbers are paired by root-state index, so the one-cycle chain skew between units is
// undone before correlating.
module tb_pairwise_correlation;
  import thundering_pkg::*;
  import tr_ref_pkg::*;

  localparam int N = 8;
  localparam int L = 8192;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  state_t    root_seed = '0;
  dec_seed_t dec_seed [N];
  logic      rnd_valid [N];
  rnd_t      rnd [N];

  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  thundering_top #(.N_SOU(N)) dut (.*);

  real zs [N][L];   // decorrelated outputs
  real ls [N][L];   // raw LCG leaf states, top 32 bits
  int  nz [N], nl [N];

  logic   leaf_v [N];
  state_t leaf_w [N];
  for (genvar i = 0; i < N; i++) begin : g_probe
    assign leaf_v[i] = dut.g_sou[i].u_sou.leaf_valid;
    assign leaf_w[i] = dut.g_sou[i].u_sou.leaf_state;
  end

  always @(posedge clk) begin
    #1;
    for (int i = 0; i < N; i++) begin
      if (rst_n && rnd_valid[i] && nz[i] < L) begin zs[i][nz[i]] = real'(rnd[i]); nz[i]++; end
      if (rst_n && leaf_v[i] && nl[i] < L) begin ls[i][nl[i]] = real'(leaf_w[i][63:32]); nl[i]++; end
    end
  end

  function automatic real pearson(input int i, input int j, input bit raw);
    real mi = 0, mj = 0, sij = 0, sii = 0, sjj = 0, a, b;
    for (int k = 0; k < L; k++) begin
      mi += raw ? ls[i][k] : zs[i][k];
      mj += raw ? ls[j][k] : zs[j][k];
    end
    mi /= L; mj /= L;
    for (int k = 0; k < L; k++) begin
      a = (raw ? ls[i][k] : zs[i][k]) - mi;
      b = (raw ? ls[j][k] : zs[j][k]) - mj;
      sij += a * b; sii += a * a; sjj += b * b;
    end
    return sij / $sqrt(sii * sjj);
  endfunction

  initial begin
    real r, max_z = 0, min_raw = 1;
    foreach (dec_seed[i]) begin
      dec_seed[i] = {splitmix(64'(11 * i)), splitmix(64'(11 * i + 5))};
      nz[i] = 0; nl[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); start = 1'b1; root_seed = 64'h0f1e2d3c4b5a6978;
    @(negedge clk); start = 1'b0;
    wait (nz[N-1] == L);
    @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) begin
        r = pearson(i, j, 1'b0); if (r < 0) r = -r; if (r > max_z) max_z = r;
        r = pearson(i, j, 1'b1); if (r < 0) r = -r; if (r < min_raw) min_raw = r;
      end
    $display("Pearson over %0d pairs: decorrelated max |rho| = %f, raw LCG min |rho| = %f",
             N * (N - 1) / 2, max_z, min_raw);
    checks++;
    if (max_z >= 0.06) begin failures++; $display("FAIL: streams correlated"); end
    checks++;
    if (min_raw <= 0.9) begin failures++; $display("FAIL: baseline not correlated as expected"); end
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
