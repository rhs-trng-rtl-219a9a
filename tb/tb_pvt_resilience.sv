// tb_pvt_resilience -- bias study of one RHS-TRNG cell against the
// probability model of its two mechanisms.
//
// For several operating points of the two units' switching probabilities
// (P1: P->AP, P2: AP->P) the testbench runs 20000 generation periods and
// measures the fraction of ones of a single unit and of the XORed cell
// output.  These are compared with the steady state of the two-state chain,
// P(1) = P1 / (P1 + P2), and with the XOR of two independent units,
// p0 (1 - p1) + p1 (1 - p0).  Shannon and minimum entropy of both streams
// are printed, and where the theory says the XOR output is less biased than
// a single unit, its measured minimum entropy must be the higher.
// Operating points: nominal 0.5/0.5; both probabilities shifted up together
// (a supply or temperature shift); an asymmetric shift shared by both units;
// and two units with different, opposite errors (process spread).
`timescale 1ns/1ps
module tb_pvt_resilience;
  import rhs_pkg::*;

  localparam int PERIODS = 20000;

  logic        wl, rd, wr, rnd;
  logic  [1:0] unit_out, mtj_state;
  prob_t [1:0] p1, p2;
  int          checks = 0, failures = 0;

  rhs_cell #(.SEED(32'h0BAD_5EED)) dut (.wl, .rd, .wr, .p_p2ap(p1), .p_ap2p(p2), .rnd, .unit_out, .mtj_state);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  function automatic prob_t to_prob(real p);
    return prob_t'($rtoi(p * 65536.0 + 0.5));
  endfunction

  function automatic real log2(real x);
    return $ln(x) / $ln(2.0);
  endfunction

  function automatic real h_shannon(real p);
    if (p <= 0.0 || p >= 1.0) return 0.0;
    return -(p * log2(p) + (1.0 - p) * log2(1.0 - p));
  endfunction

  function automatic real h_min(real p);
    return -log2((p > 0.5) ? p : 1.0 - p);
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  task automatic period;
    wl = 1; rd = 0; wr = 0; #0.2;
    rd = 1; #0.2;
    wr = 1; #2.9;
    wr = 0; rd = 0; wl = 0; #0.1;
  endtask

  task automatic point(input string name, input real a1, input real a2, input real b1, input real b2);
    int  n0 = 0, nx = 0;
    real e0, e1, ex, m0, mx;
    p1[0] = to_prob(a1); p2[0] = to_prob(a2);
    p1[1] = to_prob(b1); p2[1] = to_prob(b2);
    repeat (20) period;
    for (int k = 0; k < PERIODS; k++) begin
      wl = 1; rd = 0; wr = 0; #0.2;
      rd = 1; #0.2;
      n0 += int'(unit_out[0]);
      nx += int'(rnd);
      wr = 1; #2.9;
      wr = 0; rd = 0; wl = 0; #0.1;
    end
    e0 = a1 / (a1 + a2);
    e1 = b1 / (b1 + b2);
    ex = e0 * (1.0 - e1) + e1 * (1.0 - e0);
    m0 = real'(n0) / PERIODS;
    mx = real'(nx) / PERIODS;
    $display("%-22s unit0 P(1)=%0.4f (model %0.4f) H=%0.4f Hmin=%0.4f | cell P(1)=%0.4f (model %0.4f) H=%0.4f Hmin=%0.4f",
             name, m0, e0, h_shannon(m0), h_min(m0), mx, ex, h_shannon(mx), h_min(mx));
    check(absr(m0 - e0) < 0.02, $sformatf("%s: unit P(1) %0.4f vs %0.4f", name, m0, e0));
    check(absr(mx - ex) < 0.02, $sformatf("%s: cell P(1) %0.4f vs %0.4f", name, mx, ex));
    if (absr(e0 - 0.5) > 0.05)
      check(h_min(mx) > h_min(m0), $sformatf("%s: XOR raises min-entropy", name));
  endtask

  initial begin
    #1000000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = 0; rd = 0; wr = 0;
    #1;
    point("nominal",             0.50, 0.50, 0.50, 0.50);
    point("common shift +0.2",   0.70, 0.70, 0.70, 0.70);
    point("common shift -0.2",   0.30, 0.30, 0.30, 0.30);
    point("asymmetric 0.6/0.4",  0.60, 0.40, 0.60, 0.40);
    point("asymmetric 0.7/0.35", 0.70, 0.35, 0.70, 0.35);
    point("process spread",      0.55, 0.40, 0.45, 0.60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
