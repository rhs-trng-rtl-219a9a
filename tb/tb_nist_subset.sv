// tb_nist_subset -- statistical randomness of one RHS-TRNG cell, with part
// of the NIST SP 800-22 suite computed in the testbench.
//
// The cell runs 1,000,000 generation periods at the nominal operating point
// (both units at P1 = P2 = 0.5) and the bits are split into 10 sequences of
// 100,000, the same amount and grouping the randomness evaluation of the
// design uses.  Five tests of the suite are computed for each sequence:
//   Frequency         p = erfc(|S_n| / sqrt(2n))
//   BlockFrequency    M = 128, chi2 = 4M sum (pi_i - 1/2)^2 over n/M blocks,
//                     p = igamc(N/2, chi2/2), here by the Wilson-Hilferty
//                     normal approximation (N = 781 degrees of freedom)
//   CumulativeSums    forward and reverse, the suite's normal-sum formula
//   Runs              p = erfc(|V - 2n pi(1-pi)| / (2 sqrt(2n) pi(1-pi)))
// A sequence passes a test at p >= 0.01.  A test passes when at least 9 of
// the 10 sequences pass, the suite's minimum proportion for 10 sequences at
// that level (0.99 - 3 sqrt(0.99 * 0.01 / 10) = 0.896).  Each test is one
// check.  The remaining tests of the suite (FFT, templates, rank, linear
// complexity, ...) are not computed here.
//
// The MTJ model draws its switching noise from a seeded pseudo-random
// generator, so this measures how faithfully the two-phase loop and the XOR
// pass that noise on; it cannot stand in for a test of a physical device.
`timescale 1ns/1ps
module tb_nist_subset;
  import rhs_pkg::*;

  localparam int    GROUPS = 10;
  localparam int    N      = 100000;    // bits per sequence
  localparam int    M      = 128;       // BlockFrequency block length
  localparam real   ALPHA  = 0.01;
  localparam int    NEED   = 9;         // sequences that must pass, of 10

  logic        wl = 0, rd = 0, wr = 0, rnd;
  logic  [1:0] unit_out, mtj_state;
  prob_t [1:0] p1, p2;
  int          checks = 0, failures = 0;
  bit          seq [N];
  int          pass_freq = 0, pass_blk = 0, pass_csf = 0, pass_csr = 0, pass_runs = 0;

  rhs_cell #(.SEED(32'h1357_9BDF)) dut (.wl, .rd, .wr, .p_p2ap(p1), .p_ap2p(p2), .rnd, .unit_out, .mtj_state);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // erfc with fractional error below 1.2e-7 (Chebyshev fit, W. H. Press et al.)
  function automatic real erfc(real x);
    real z, t, r;
    z = (x < 0.0) ? -x : x;
    t = 1.0 / (1.0 + 0.5 * z);
    r = t * $exp(-z * z - 1.26551223 + t * (1.00002368 + t * (0.37409196 + t * (0.09678418 +
        t * (-0.18628806 + t * (0.27886807 + t * (-1.13520398 + t * (1.48851587 +
        t * (-0.82215223 + t * 0.17087277)))))))));
    return (x >= 0.0) ? r : 2.0 - r;
  endfunction

  function automatic real phi(real x);   // standard normal CDF
    return 0.5 * erfc(-x / $sqrt(2.0));
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // p-value of the cumulative sums test for maximum excursion z over n steps
  function automatic real cusum_p(int z, int n);
    real s1 = 0.0, s2 = 0.0, sq, rz;
    int  k;
    sq = $sqrt(real'(n));
    rz = real'(z);
    for (k = int'($floor((-real'(n) / rz + 1.0) / 4.0)); k <= int'($floor((real'(n) / rz - 1.0) / 4.0)); k++)
      s1 += phi((4.0 * k + 1.0) * rz / sq) - phi((4.0 * k - 1.0) * rz / sq);
    for (k = int'($floor((-real'(n) / rz - 3.0) / 4.0)); k <= int'($floor((real'(n) / rz - 1.0) / 4.0)); k++)
      s2 += phi((4.0 * k + 3.0) * rz / sq) - phi((4.0 * k + 1.0) * rz / sq);
    return 1.0 - s1 + s2;
  endfunction

  task automatic period(output bit b);
    wl = 1; rd = 0; wr = 0; #0.2;
    rd = 1; #0.2;
    b = rnd;
    wr = 1; #2.9;
    wr = 0; rd = 0; wl = 0; #0.1;
  endtask

  task automatic test_group(input int g);
    int  ones = 0, s = 0, smax = 0, v = 1, nblk, zr = 0, cnt;
    int  pre [N+1];
    real pf, pb, pcf, pcr, pr, chi2, pi, x, z, k;
    pre[0] = 0;
    for (int i = 0; i < N; i++) begin
      ones += int'(seq[i]);
      s    += seq[i] ? 1 : -1;
      pre[i+1] = s;
      if ((s < 0 ? -s : s) > smax) smax = (s < 0 ? -s : s);
      if (i > 0 && seq[i] != seq[i-1]) v++;
    end
    // Frequency
    pf = erfc(absr(real'(s)) / $sqrt(2.0 * N));
    // BlockFrequency
    nblk = N / M;
    chi2 = 0.0;
    for (int b = 0; b < nblk; b++) begin
      cnt = 0;
      for (int j = 0; j < M; j++) cnt += int'(seq[b * M + j]);
      chi2 += (real'(cnt) / M - 0.5) ** 2;
    end
    chi2 = 4.0 * M * chi2;
    k  = real'(nblk);
    z  = ((chi2 / k) ** (1.0 / 3.0) - (1.0 - 2.0 / (9.0 * k))) / $sqrt(2.0 / (9.0 * k));
    pb = 0.5 * erfc(z / $sqrt(2.0));
    // CumulativeSums, forward and reverse
    for (int i = 0; i < N; i++)
      if ((s - pre[i] < 0 ? pre[i] - s : s - pre[i]) > zr) zr = (s - pre[i] < 0 ? pre[i] - s : s - pre[i]);
    pcf = cusum_p(smax, N);
    pcr = cusum_p(zr, N);
    // Runs (prerequisite: frequency close enough to 1/2)
    pi = real'(ones) / N;
    if (absr(pi - 0.5) >= 2.0 / $sqrt(real'(N))) pr = 0.0;
    else begin
      x  = absr(real'(v) - 2.0 * N * pi * (1.0 - pi)) / (2.0 * $sqrt(2.0 * N) * pi * (1.0 - pi));
      pr = erfc(x);
    end
    $display("seq %0d: ones %0d  Frequency %.4f  BlockFrequency %.4f  CuSum fwd %.4f rev %.4f  Runs %.4f",
             g, ones, pf, pb, pcf, pcr, pr);
    pass_freq += int'(pf >= ALPHA);
    pass_blk  += int'(pb >= ALPHA);
    pass_csf  += int'(pcf >= ALPHA);
    pass_csr  += int'(pcr >= ALPHA);
    pass_runs += int'(pr >= ALPHA);
  endtask

  // Watchdog: 1e6 periods take 3.4 ms of simulated time.
  initial begin
    #10ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit b;
    p1 = '{PROB_HALF, PROB_HALF};
    p2 = '{PROB_HALF, PROB_HALF};
    repeat (16) period(b);
    for (int g = 0; g < GROUPS; g++) begin
      for (int i = 0; i < N; i++) begin
        period(b);
        seq[i] = b;
      end
      test_group(g);
    end
    check(pass_freq >= NEED, $sformatf("Frequency passed %0d/10", pass_freq));
    check(pass_blk  >= NEED, $sformatf("BlockFrequency passed %0d/10", pass_blk));
    check(pass_csf  >= NEED, $sformatf("CumulativeSums forward passed %0d/10", pass_csf));
    check(pass_csr  >= NEED, $sformatf("CumulativeSums reverse passed %0d/10", pass_csr));
    check(pass_runs >= NEED, $sformatf("Runs passed %0d/10", pass_runs));
    $display("pass rates: Frequency %0d/10  BlockFrequency %0d/10  CuSum %0d/10 %0d/10  Runs %0d/10",
             pass_freq, pass_blk, pass_csf, pass_csr, pass_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
