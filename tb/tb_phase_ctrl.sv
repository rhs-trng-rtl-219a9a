// tb_phase_ctrl -- self-checking test of the phase sequencer at its default
// timing (1 pre-charge, 1 sense, 6 write cycles = 8-cycle period).
// A reference model counts cycles since a start was accepted and predicts
// wl/rd/wr/sample/last/ready every cycle.  Covered: idle levels, a single
// period, a start ignored while busy, and back-to-back periods with start
// held high (one period every 8 cycles).
`timescale 1ns/1ps
module tb_phase_ctrl;
  import rhs_pkg::*;

  localparam int PRE = 1, RDC = 1, WRC = 6, PERIOD = PRE + RDC + WRC;

  logic clk = 0, rst_n, start;
  logic ready, busy, wl, rd, wr, sample, last;
  int   checks = 0, failures = 0;
  int   pos;          // model: cycle index inside a period, -1 = idle
  int   n_periods = 0, n_chained = 0;
  int   cyc = 0, last_cycle = -1;
  logic chained = 0;  // model: the running period started in the last cycle of the one before

  phase_ctrl dut (.clk, .rst_n, .start, .ready, .busy, .wl, .rd, .wr, .sample, .last);

  always #0.25 clk = ~clk;   // 2 GHz

  // Reference model and comparison, evaluated just before each rising edge.
  always @(negedge clk) if (rst_n) begin
    logic e_wl, e_rd, e_wr, e_sample, e_last, e_ready;
    e_wl     = (pos >= 0);
    e_rd     = (pos >= PRE);
    e_wr     = (pos >= PRE + RDC);
    e_sample = (pos == PRE + RDC - 1);
    e_last   = (pos == PERIOD - 1);
    e_ready  = (pos < 0) || e_last;
    checks++;
    if ({wl, rd, wr, sample, last, ready, busy} !== {e_wl, e_rd, e_wr, e_sample, e_last, e_ready, e_wl}) begin
      failures++;
      $display("FAIL @%0d pos=%0d: wl/rd/wr/sample/last/ready/busy=%b%b%b%b%b%b%b", cyc, pos,
               wl, rd, wr, sample, last, ready, busy);
    end
  end

  always @(posedge clk) begin
    cyc++;
    if (!rst_n) pos <= -1;
    else begin
      if (pos == PERIOD - 1) begin
        n_periods++;
        if (chained) begin
          n_chained++;
          checks++;
          if (cyc - last_cycle != PERIOD) begin
            failures++;
            $display("FAIL: back-to-back periods %0d cycles apart", cyc - last_cycle);
          end
        end
        last_cycle = cyc;
      end
      if (start && ((pos < 0) || (pos == PERIOD - 1))) begin
        pos <= 0;
        chained <= (pos == PERIOD - 1);
      end
      else if (pos == PERIOD - 1) pos <= -1;
      else if (pos >= 0) pos <= pos + 1;
    end
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; pos = -1;
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    repeat (3) @(posedge clk);
    #0.1 start = 1;
    @(posedge clk); #0.1 start = 0;
    repeat (3) @(posedge clk);
    #0.1 start = 1;                 // while busy: must be ignored
    @(posedge clk); #0.1 start = 0;
    repeat (10) @(posedge clk);
    #0.1 start = 1;                 // back to back: 5 periods, 4 chained
    repeat (5 * PERIOD) @(posedge clk);
    #0.1 start = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (n_periods != 6 || n_chained != 4) begin
      failures++;
      $display("FAIL: %0d periods (%0d chained), expected 6 (4)", n_periods, n_chained);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
