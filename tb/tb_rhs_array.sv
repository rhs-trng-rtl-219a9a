// tb_rhs_array -- self-checking test of the parallel array at N_BITS = 8
// (9 units).  Each unit is set to P = 1 (flips every period) or locked, in
// a pattern; after a first read the testbench predicts every unit's value
// independently and checks every output bit is unit i XOR unit i+1.  Then a
// second pattern, and the all-0.5 case for a rough balance check.
`timescale 1ns/1ps
module tb_rhs_array;
  import rhs_pkg::*;

  localparam int N = 8;

  logic              wl, rd, wr;
  logic  [N-1:0]     bits;
  logic  [N:0]       unit_out, mtj_state;
  prob_t [N:0]       p1, p2;
  int                checks = 0, failures = 0;

  rhs_array #(.N_BITS(N)) dut (.wl, .rd, .wr, .p_p2ap(p1), .p_ap2p(p2), .bits, .unit_out, .mtj_state);

  task automatic period(output logic [N-1:0] b, output logic [N:0] u);
    wl = 1; rd = 0; wr = 0; #0.2;
    rd = 1; #0.2;
    b = bits; u = unit_out;
    wr = 1; #2.9;
    wr = 0; rd = 0; wl = 0; #0.1;
  endtask

  // flip[i] = 1: unit i flips every period; 0: unit i holds.
  task automatic run_pattern(input logic [N:0] flip);
    logic [N:0]   model, u;
    logic [N-1:0] b, exp_b;
    for (int i = 0; i <= N; i++) begin
      p1[i] = PROB_ONE;
      p2[i] = flip[i] ? PROB_ONE : prob_t'(0);   // non-flippers lock at 1
    end
    period(b, u); period(b, u);                  // settle the locked ones
    period(b, model);
    for (int k = 0; k < 12; k++) begin
      model = model ^ flip;
      for (int i = 0; i < N; i++) exp_b[i] = model[i] ^ model[i+1];
      period(b, u);
      checks++;
      if (u !== model || b !== exp_b) begin
        failures++;
        $display("FAIL: flip=%b bits=%b exp=%b units=%b exp=%b", flip, b, exp_b, u, model);
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] b;
    logic [N:0]   u;
    int ones;
    wl = 0; rd = 0; wr = 0;
    #1;
    run_pattern(9'b1_0110_1001);
    run_pattern(9'b0_1100_0011);
    run_pattern(9'b1_1111_1111);
    for (int i = 0; i <= N; i++) begin p1[i] = PROB_HALF; p2[i] = PROB_HALF; end
    ones = 0;
    for (int k = 0; k < 1000; k++) begin period(b, u); ones += $countones(b); end
    checks++;
    if (ones < 3700 || ones > 4300) begin
      failures++;
      $display("FAIL: ones=%0d of 8000 at P=0.5", ones);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
