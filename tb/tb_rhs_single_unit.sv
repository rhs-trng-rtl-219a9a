// tb_rhs_single_unit -- self-checking test of one generator unit driven
// through read/write periods with the paper's circuit timing (0.2 ns
// pre-charge, 0.2 ns sensing, 2.9 ns write).
//  * out_n is the inverse of out after every read;
//  * P1 = P2 = 1: every write flips the cell, so the read value alternates;
//  * P1 = 1, P2 = 0 (or the reverse): the unit locks at 1 (or 0);
//  * statistics: the fraction of ones approaches P1 / (P1 + P2), for
//    (0.5, 0.5) -> 0.5 and (0.6, 0.2) -> 0.75, over 4000 periods.
`timescale 1ns/1ps
module tb_rhs_single_unit;
  import rhs_pkg::*;

  logic  wl, rd, wr, out, out_n, mtj_state;
  prob_t p1, p2;
  int    checks = 0, failures = 0;

  rhs_single_unit dut (.wl, .rd, .wr, .p_p2ap(p1), .p_ap2p(p2), .out, .out_n, .mtj_state);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // One generation period; returns the bit read in its read phase.
  task automatic period(output logic bit_o);
    wl = 1; rd = 0; wr = 0; #0.2;
    rd = 1; #0.2;
    bit_o = out;
    check(out_n == ~out, "out_n is the inverse of out");
    wr = 1; #2.9;
    wr = 0; rd = 0; wl = 0; #0.1;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic b, prev;
    int   ones;
    real  frac;
    wl = 0; rd = 0; wr = 0;
    p1 = PROB_ONE; p2 = PROB_ONE;
    #1;
    period(prev);
    for (int k = 0; k < 20; k++) begin
      period(b);
      check(b == ~prev, "P1=P2=1: read value alternates every period");
      prev = b;
    end
    p2 = '0;
    period(b); period(b);
    for (int k = 0; k < 10; k++) begin period(b); check(b == 1'b1, "P2=0 locks at 1"); end
    p1 = '0; p2 = PROB_ONE;
    period(b); period(b);
    for (int k = 0; k < 10; k++) begin period(b); check(b == 1'b0, "P1=0 locks at 0"); end

    p1 = PROB_HALF; p2 = PROB_HALF;
    ones = 0;
    for (int k = 0; k < 4000; k++) begin period(b); ones += int'(b); end
    frac = real'(ones) / 4000.0;
    check(frac > 0.46 && frac < 0.54, $sformatf("P1=P2=0.5: ones=%0.3f", frac));

    p1 = prob_t'(39322); p2 = prob_t'(13107);   // 0.6, 0.2
    ones = 0;
    for (int k = 0; k < 4000; k++) begin period(b); ones += int'(b); end
    frac = real'(ones) / 4000.0;
    check(frac > 0.71 && frac < 0.79, $sformatf("P1=0.6 P2=0.2: ones=%0.3f (expect 0.75)", frac));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
