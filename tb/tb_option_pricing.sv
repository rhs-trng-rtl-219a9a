// tb_option_pricing -- Monte Carlo European call pricing driven by the
// frand.d instruction, the kind of program the TRNG is meant to speed up.
//
// The testbench acts as the host program: it issues frand.d instructions to
// the top at its default size, turns each 52-bit fraction into a uniform
// u = (fraction + 0.5) / 2**52 on (0, 1), makes standard normals with the
// Box-Muller transform, simulates terminal stock prices
//   S_T = S0 exp((r - sigma^2 / 2) T + sigma sqrt(T) z)
// and averages the discounted payoff max(S_T - K, 0).  After 1e2, 1e3, ...
// paths up to PATHS (the range of simulation counts the pricing benchmark
// sweeps) the estimate must lie within four standard errors of the
// Black-Scholes closed form (normal CDF by the Abramowitz-Stegun 26.2.17
// polynomial).  Market parameters are the
// usual textbook example S0 = 100, K = 105, T = 1, r = 0.05, sigma = 0.2;
// PATHS paths take PATHS frand.d instructions, 8 cycles each.
`timescale 1ns/1ps
module tb_option_pricing;
  import rhs_pkg::*;

  localparam int N     = FRAC_D_BITS;
  localparam int PATHS = 1000000;
  localparam real S0 = 100.0, K = 105.0, T = 1.0, R = 0.05, SIGMA = 0.2;
  localparam real PI = 3.14159265358979323846;

  logic        clk = 0, rst_n;
  logic        instr_valid, instr_ready, instr_is_trng;
  logic [31:0] instr;
  logic [4:0]  rs1_idx, rs2_idx, wb_rd;
  logic        wb_valid, wb_is_fp;
  logic [63:0] wb_data;
  prob_t [N:0] p1, p2;
  int          checks = 0, failures = 0;

  rhs_trng_top dut (.clk, .rst_n, .instr_valid, .instr, .instr_ready, .instr_is_trng,
                    .rs1_idx, .rs2_idx, .wb_valid, .wb_rd, .wb_is_fp, .wb_data,
                    .p_p2ap(p1), .p_ap2p(p2));

  always #0.25 clk = ~clk;

  localparam logic [31:0] FRAND_D_F10 = {7'b0011001, 5'd0, 5'd0, 3'b000, 5'd10, 7'b1010011};

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // Standard normal CDF, Abramowitz & Stegun 26.2.17 (|error| < 7.5e-8).
  function automatic real norm_cdf(real x);
    real t, poly, pdf, q;
    t    = 1.0 / (1.0 + 0.2316419 * absr(x));
    poly = t * (0.319381530 + t * (-0.356563782 + t * (1.781477937
           + t * (-1.821255978 + t * 1.330274429))));
    pdf  = $exp(-0.5 * x * x) / $sqrt(2.0 * PI);
    q    = pdf * poly;
    return (x >= 0.0) ? 1.0 - q : q;
  endfunction

  task automatic frand_d(output real u);
    @(negedge clk);
    instr_valid = 1; instr = FRAND_D_F10;
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    instr_valid = 0;
    while (!wb_valid) @(negedge clk);
    checks++;
    if (!(wb_is_fp && wb_rd == 5'd10 && wb_data[63:52] == 12'd0)) begin
      failures++;
      $display("FAIL: frand.d write-back %h rd=%0d", wb_data, wb_rd);
    end
    u = (real'(wb_data[51:0]) + 0.5) / 4503599627370496.0;   // 2**52
  endtask

  // Estimate after n paths, checked against the closed form.
  task automatic report(input int n, input real sum, input real sum2, input real bs);
    real est, se;
    est = $exp(-R * T) * sum / n;
    se  = $exp(-R * T) * $sqrt((sum2 / n - (sum / n) * (sum / n)) / n);
    $display("European call after %0d paths: Monte Carlo %0.4f (+- %0.4f), Black-Scholes %0.4f",
             n, est, se, bs);
    checks++;
    if (absr(est - bs) > 4.0 * se) begin
      failures++;
      $display("FAIL: estimate after %0d paths off by %0.2f standard errors", n, absr(est - bs) / se);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real u1, u2, rad, z[2], st, pay, sum, sum2, d1, d2, bs;
    int  next_report;
    next_report = 100;
    d1 = ($ln(S0 / K) + (R + 0.5 * SIGMA * SIGMA) * T) / (SIGMA * $sqrt(T));
    d2 = d1 - SIGMA * $sqrt(T);
    bs = S0 * norm_cdf(d1) - K * $exp(-R * T) * norm_cdf(d2);
    for (int i = 0; i <= N; i++) begin p1[i] = PROB_HALF; p2[i] = PROB_HALF; end
    rst_n = 0; instr_valid = 0; instr = 32'h0000_0013;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    sum = 0.0; sum2 = 0.0;
    for (int k = 0; k < PATHS / 2; k++) begin
      frand_d(u1);
      frand_d(u2);
      rad  = $sqrt(-2.0 * $ln(u1));
      z[0] = rad * $cos(2.0 * PI * u2);
      z[1] = rad * $sin(2.0 * PI * u2);
      for (int j = 0; j < 2; j++) begin
        st  = S0 * $exp((R - 0.5 * SIGMA * SIGMA) * T + SIGMA * $sqrt(T) * z[j]);
        pay = (st > K) ? (st - K) : 0.0;
        sum  += pay;
        sum2 += pay * pay;
      end
      if (2 * (k + 1) == next_report) begin
        report(next_report, sum, sum2, bs);
        next_report = (next_report * 10 > PATHS) ? PATHS : next_report * 10;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
