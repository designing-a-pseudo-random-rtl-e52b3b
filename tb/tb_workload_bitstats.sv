// tb_workload_bitstats: runs the generator at its default parameters for
// the TestU01 sequence length used in the evaluation (2^25 bits per output
// stream, which also covers one 1 Mbit NIST sequence and the 5 Mbit
// Diehard sequence) and applies five of the NIST SP800-22 tests to each of
// B1..B5 on the fly:
//   * frequency (monobit): s = |#1 - #0| / sqrt(n), p = erfc(s / sqrt(2));
//   * runs: V = number of runs, pi = #1/n,
//           p = erfc(|V - 2 n pi (1-pi)| / (2 sqrt(2n) pi (1-pi)));
//   * block frequency, M = 128: chi2 = 4 M sum (pi_j - 1/2)^2 over the
//     n/M blocks, p = igamc(N/2, chi2/2), evaluated with the
//     Wilson-Hilferty normal approximation (N = 262,144 degrees of freedom);
//   * cumulative sums, forward: z = max |S_k| of the +-1 random walk, p by
//     the SP800-22 sum of normal distribution differences;
//   * approximate entropy, m = 2: overlapping 2- and 3-bit pattern counts
//     with wrap-around, chi2 = 2 n (ln 2 - ApEn), p = igamc(2, chi2/2) =
//     exp(-chi2/2) (1 + chi2/2).
// A stream passes a test when p >= 0.01 (the NIST significance level); the
// testbench counts a failure for every stream/test that does not pass.
// It also collects the histogram of the first 100,000 truncated 12-bit X
// samples (one per Runge-Kutta step, the histogram workload) and prints its
// chi-square against a uniform distribution (4095 degrees of freedom); this
// is reported, not checked, since the raw samples are not expected to be
// uniform. The same histogram is taken of B1 after post-processing, cut
// into consecutive 12-bit words (100,000 words, MSB first); there uniformity
// is expected, and the chi-square must give p >= 0.01 (Wilson-Hilferty). Finally it checks that the chaotic state stays inside
// |value| < 8 for the whole run (about 516,000 Runge-Kutta steps), i.e. on
// the bounded attractor without fixed-point wrap-around.
module tb_workload_bitstats;
  import prng_pkg::*;

  localparam int NBITS = 1 << 25;
  localparam int NHIST = 100000;

  logic       clk = 1'b0;
  logic       rst = 1'b1;
  logic [4:0] b, frame;
  state_t     st;
  logic       step;
  ffrk_en_t   en;
  int         checks = 0, failures = 0;

  prng5d_top dut (
    .clk(clk), .rst(rst), .b_o(b), .state_o(st), .step_o(step), .en_o(en), .frame_o(frame)
  );

  always #5 clk = ~clk;

  // erfc by the Numerical Recipes rational approximation (|error| < 1.2e-7)
  function automatic real erfc_approx(real x);
    real z, t, r;
    z = (x < 0.0) ? -x : x;
    t = 1.0 / (1.0 + 0.5 * z);
    r = t * $exp(-z * z - 1.26551223 + t * (1.00002368 + t * (0.37409196 + t * (0.09678418 +
        t * (-0.18628806 + t * (0.27886807 + t * (-1.13520398 + t * (1.48851587 +
        t * (-0.82215223 + t * 0.17087277)))))))));
    return (x >= 0.0) ? r : 2.0 - r;
  endfunction

  function automatic real phi(real x);   // standard normal CDF
    return 1.0 - 0.5 * erfc_approx(x / $sqrt(2.0));
  endfunction

  // SP800-22 cumulative-sums p-value for maximum excursion z over n steps
  function automatic real cusum_p(real z, real n);
    real sum1, sum2, sq;
    int  k_lo, k_hi;
    sq   = $sqrt(n);
    sum1 = 0.0;
    k_lo = int'($floor((-n / z + 1.0) / 4.0));
    k_hi = int'($floor((n / z - 1.0) / 4.0));
    for (int k = k_lo; k <= k_hi; k++)
      sum1 += phi((4.0 * k + 1.0) * z / sq) - phi((4.0 * k - 1.0) * z / sq);
    sum2 = 0.0;
    k_lo = int'($floor((-n / z - 3.0) / 4.0));
    for (int k = k_lo; k <= k_hi; k++)
      sum2 += phi((4.0 * k + 3.0) * z / sq) - phi((4.0 * k + 1.0) * z / sq);
    return 1.0 - sum1 + sum2;
  endfunction

  localparam int BF_M = 128;

  initial begin
    longint ones [5];
    longint walk [5], walk_max [5];
    int     blk_ones [5];
    real    blk_sum [5];
    longint cnt2 [5][4];
    longint cnt3 [5][8];
    bit [1:0] hist2 [5];
    bit [1:0] first2 [5];
    real    p_blk, p_cus, p_ape, chi2, k_dof, wh, phi2, phi3;
    longint runs [5];
    bit     prev [5];
    real    n, pi, s, p_mono, p_runs, tau, chi;
    int     hist [4096];
    int     nhist;
    int     hist_b1 [4096];
    int     nb1, b1_word, b1_len;
    real    p_b1;
    longint out_of_range;
    hist  = '{default: 0};
    hist_b1 = '{default: 0};
    nb1 = 0; b1_word = 0; b1_len = 0;
    out_of_range = 0;
    nhist = 0;
    for (int i = 0; i < 5; i++) begin
      ones[i] = 0; runs[i] = 0; prev[i] = 0;
      walk[i] = 0; walk_max[i] = 0; blk_ones[i] = 0; blk_sum[i] = 0.0;
      hist2[i] = '0; first2[i] = '0;
      for (int j = 0; j < 4; j++) cnt2[i][j] = 0;
      for (int j = 0; j < 8; j++) cnt3[i][j] = 0;
    end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);            // first cycle: output register still cleared
    for (int t = 0; t < NBITS; t++) begin
      @(posedge clk);
      #1;
      for (int i = 0; i < 5; i++) begin
        if (b[i]) ones[i]++;
        if (t == 0 || b[i] != prev[i]) runs[i]++;
        prev[i] = b[i];
        walk[i] += b[i] ? 1 : -1;
        if (walk[i] > walk_max[i]) walk_max[i] = walk[i];
        if (-walk[i] > walk_max[i]) walk_max[i] = -walk[i];
        if (b[i]) blk_ones[i]++;
        if (t % BF_M == BF_M - 1) begin
          blk_sum[i] += (real'(blk_ones[i]) / BF_M - 0.5) ** 2;
          blk_ones[i] = 0;
        end
        if (t < 2) first2[i][1 - t] = b[i];
        if (t >= 1) cnt2[i][{hist2[i][0], b[i]}]++;
        if (t >= 2) cnt3[i][{hist2[i], b[i]}]++;
        hist2[i] = {hist2[i][0], b[i]};
      end
      for (int i = 0; i < 5; i++) begin
        int v;
        v = (i == 0) ? st.x : (i == 1) ? st.y : (i == 2) ? st.z : (i == 3) ? st.u : st.v;
        if (v >= 32'sh4000_0000 || v <= -32'sh4000_0000) out_of_range++;
      end
      if (nb1 < NHIST) begin
        b1_word = ((b1_word << 1) | int'(b[0])) & 32'hfff;
        b1_len++;
        if (b1_len == 12) begin
          hist_b1[b1_word]++;
          nb1++;
          b1_len = 0;
        end
      end
      if (step && nhist < NHIST) begin
        hist[st.x[11:0]]++;
        nhist++;
      end
    end
    chi = 0.0;
    foreach (hist[k]) chi += (real'(hist[k]) - real'(nhist) / 4096.0) ** 2 / (real'(nhist) / 4096.0);
    $display("X~ histogram: %0d samples, chi-square vs uniform %f (4095 dof)", nhist, chi);
    chi = 0.0;
    foreach (hist_b1[k]) chi += (real'(hist_b1[k]) - real'(nb1) / 4096.0) ** 2 / (real'(nb1) / 4096.0);
    p_b1 = 0.5 * erfc_approx((((chi / 4095.0) ** (1.0 / 3.0)) - (1.0 - 2.0 / (9.0 * 4095.0))) /
                             $sqrt(2.0 / (9.0 * 4095.0)) / $sqrt(2.0));
    $display("B1 12-bit word histogram: %0d words, chi-square vs uniform %f (4095 dof), p=%f", nb1, chi, p_b1);
    checks++;
    if (nb1 != NHIST || p_b1 < 0.01) begin failures++; $display("FAIL B1 word histogram"); end
    checks++;
    if (out_of_range != 0) begin
      failures++;
      $display("FAIL state left |value| < 8 in %0d cycles", out_of_range);
    end
    checks++;
    if (nhist != NHIST) begin failures++; $display("FAIL only %0d X~ samples", nhist); end
    n = real'(NBITS);
    for (int i = 0; i < 5; i++) begin
      pi     = real'(ones[i]) / n;
      s      = ((2.0 * real'(ones[i]) - n) < 0 ? -(2.0 * real'(ones[i]) - n) : (2.0 * real'(ones[i]) - n)) / $sqrt(n);
      p_mono = erfc_approx(s / $sqrt(2.0));
      tau    = 2.0 / $sqrt(n);
      if ((pi - 0.5 > tau) || (0.5 - pi > tau)) p_runs = 0.0;
      else begin
        real d;
        d      = real'(runs[i]) - 2.0 * n * pi * (1.0 - pi);
        d      = (d < 0.0) ? -d : d;
        p_runs = erfc_approx(d / (2.0 * $sqrt(2.0 * n) * pi * (1.0 - pi)));
      end
      // block frequency
      k_dof = n / BF_M;
      chi2  = 4.0 * BF_M * blk_sum[i];
      wh    = ((chi2 / k_dof) ** (1.0 / 3.0) - (1.0 - 2.0 / (9.0 * k_dof))) /
              $sqrt(2.0 / (9.0 * k_dof));
      p_blk = 0.5 * erfc_approx(wh / $sqrt(2.0));
      // cumulative sums (forward)
      p_cus = cusum_p(real'(walk_max[i]), n);
      // approximate entropy, m = 2: close the circular sequence with its
      // first two bits (the last two bits are in hist2)
      cnt2[i][{hist2[i][0], first2[i][1]}]++;
      cnt3[i][{hist2[i], first2[i][1]}]++;
      cnt3[i][{hist2[i][0], first2[i]}]++;
      phi2 = 0.0;
      phi3 = 0.0;
      for (int j = 0; j < 4; j++)
        if (cnt2[i][j] != 0) phi2 += real'(cnt2[i][j]) / n * $ln(real'(cnt2[i][j]) / n);
      for (int j = 0; j < 8; j++)
        if (cnt3[i][j] != 0) phi3 += real'(cnt3[i][j]) / n * $ln(real'(cnt3[i][j]) / n);
      chi2  = 2.0 * n * ($ln(2.0) - (phi2 - phi3));
      p_ape = $exp(-chi2 / 2.0) * (1.0 + chi2 / 2.0);
      $display("B%0d: n=%0d ones=%0d runs=%0d  monobit p=%f  runs p=%f",
               i + 1, NBITS, ones[i], runs[i], p_mono, p_runs);
      $display("B%0d: block frequency p=%f  cumulative sums p=%f (max |S| %0d)  approximate entropy p=%f",
               i + 1, p_blk, p_cus, walk_max[i], p_ape);
      checks++;
      if (p_blk < 0.01) begin failures++; $display("FAIL B%0d block frequency", i + 1); end
      checks++;
      if (p_cus < 0.01) begin failures++; $display("FAIL B%0d cumulative sums", i + 1); end
      checks++;
      if (p_ape < 0.01) begin failures++; $display("FAIL B%0d approximate entropy", i + 1); end
      checks++;
      if (p_mono < 0.01) begin failures++; $display("FAIL B%0d monobit", i + 1); end
      checks++;
      if (p_runs < 0.01) begin failures++; $display("FAIL B%0d runs", i + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NBITS + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
