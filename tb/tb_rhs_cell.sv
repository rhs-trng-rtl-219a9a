// tb_rhs_cell -- self-checking test of the two-unit XOR cell.
//  * rnd equals unit_out[0] ^ unit_out[1] after every read;
//  * both units at P = 1: both flip each period, so rnd is constant;
//  * unit 0 at P = 1, unit 1 locked: rnd alternates;
//  * statistics: both units biased to 0.75 ones (P1=0.6, P2=0.2) give
//    rnd = 1 with probability 2*0.75*0.25 = 0.375, not 0.75.
`timescale 1ns/1ps
module tb_rhs_cell;
  import rhs_pkg::*;

  logic        wl, rd, wr, rnd;
  logic  [1:0] unit_out, mtj_state;
  prob_t [1:0] p1, p2;
  int          checks = 0, failures = 0;

  rhs_cell dut (.wl, .rd, .wr, .p_p2ap(p1), .p_ap2p(p2), .rnd, .unit_out, .mtj_state);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic period(output logic bit_o);
    wl = 1; rd = 0; wr = 0; #0.2;
    rd = 1; #0.2;
    bit_o = rnd;
    check(rnd == (unit_out[0] ^ unit_out[1]), "rnd is the XOR of the two units");
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
    p1 = {PROB_ONE, PROB_ONE}; p2 = {PROB_ONE, PROB_ONE};
    #1;
    period(prev);
    for (int k = 0; k < 10; k++) begin
      period(b); check(b == prev, "both units flip: rnd constant"); prev = b;
    end
    p1[1] = PROB_ONE; p2[1] = '0;           // unit 1 locks at 1
    period(prev); period(prev);
    for (int k = 0; k < 10; k++) begin
      period(b); check(b == ~prev, "one unit flips: rnd alternates"); prev = b;
    end
    p1 = {prob_t'(39322), prob_t'(39322)}; p2 = {prob_t'(13107), prob_t'(13107)};
    ones = 0;
    for (int k = 0; k < 4000; k++) begin period(b); ones += int'(b); end
    frac = real'(ones) / 4000.0;
    check(frac > 0.335 && frac < 0.415, $sformatf("biased units: xor ones=%0.3f (expect 0.375)", frac));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
