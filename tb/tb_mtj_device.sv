// tb_mtj_device -- self-checking test of the behavioural 1T-1MTJ model.
// Deterministic corners (probability 1 and 0 in both directions, a pulse
// towards the held state, selector or pass gate off, r_high with the
// selector off) and a statistical check: 4000 pulses at P = 1/2 must switch
// 50% +- 4% of the time.
`timescale 1ns/1ps
module tb_mtj_device;
  import rhs_pkg::*;

  logic  wl, bl, bl_en, sl;
  prob_t p1, p2;
  logic  r_high, state;
  int    checks = 0, failures = 0;

  mtj_device dut (.wl, .bl, .bl_en, .sl, .p_p2ap(p1), .p_ap2p(p2), .r_high, .state);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (state=%0b r_high=%0b)", msg, state, r_high);
    end
  endtask

  // One write pulse of 3 ns towards `to_ap`, with the given enables.
  task automatic pulse(input logic to_ap, input logic sel = 1'b1, input logic pass = 1'b1);
    wl = sel; bl = to_ap; sl = ~to_ap; #0.5;
    bl_en = pass; #3;
    bl_en = 1'b0; #0.5;
    wl = 1'b0; bl = 1'b0; sl = 1'b1; #0.5;
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_sw;
    wl = 0; bl = 0; bl_en = 0; sl = 1;
    p1 = PROB_ONE; p2 = PROB_ONE;
    #1;
    // Force a known state: P1 = 1 drives P -> AP surely.
    pulse(1'b1);
    check(state == 1'b1, "P1=1 write towards AP leaves AP");
    wl = 1; #0.1;
    check(r_high == 1'b1, "AP reads high resistance");
    wl = 0; #0.1;
    pulse(1'b0);
    check(state == 1'b0, "P2=1 write towards P switches AP->P");
    wl = 1; #0.1;
    check(r_high == 1'b0, "P reads low resistance with selector on");
    wl = 0; #0.1;
    check(r_high == 1'b1, "open selector reads high");
    pulse(1'b0);
    check(state == 1'b0, "write towards held state P changes nothing");
    pulse(1'b1, 1'b0, 1'b1);
    check(state == 1'b0, "no switch with selector off");
    pulse(1'b1, 1'b1, 1'b0);
    check(state == 1'b0, "no switch with BL pass gate off");
    p1 = '0;
    pulse(1'b1);
    check(state == 1'b0, "P1=0 never switches P->AP");
    p1 = PROB_ONE;
    pulse(1'b1);
    check(state == 1'b1, "P1=1 switches P->AP");
    pulse(1'b1);
    check(state == 1'b1, "write towards held state AP changes nothing");
    p2 = '0;
    pulse(1'b0);
    check(state == 1'b1, "P2=0 never switches AP->P");

    // Statistics at the 50% operating point, P->AP attempts.
    p1 = PROB_HALF; p2 = PROB_ONE;
    n_sw = 0;
    for (int k = 0; k < 4000; k++) begin
      pulse(1'b0);                  // back to P surely
      pulse(1'b1);                  // random attempt
      if (state) n_sw++;
    end
    check(n_sw > 1840 && n_sw < 2160, $sformatf("P->AP at P1=0.5: %0d/4000", n_sw));
    // AP->P attempts.
    p1 = PROB_ONE; p2 = PROB_HALF;
    n_sw = 0;
    for (int k = 0; k < 4000; k++) begin
      pulse(1'b1);
      pulse(1'b0);
      if (!state) n_sw++;
    end
    check(n_sw > 1840 && n_sw < 2160, $sformatf("AP->P at P2=0.5: %0d/4000", n_sw));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
