// tb_rhs_exec_unit -- self-checking test of the TRNG execution unit at its
// default size (52 bits, 53 units) and timing.
// Every unit is given P = 1 to flip every period, or locked at AP, by a
// random pattern, so each period's word is the previous one XOR a known
// mask.  After two warm-up frand.d ops the testbench knows the word and
// predicts every later result of rand, frand.s and frand.d exactly,
// including wb_rd and wb_is_fp.  It also checks the 8-cycle issue-to-
// write-back latency, back-to-back issue (one result per 8 cycles), and
// that issue_ready stays low while a period runs (stall).
`timescale 1ns/1ps
module tb_rhs_exec_unit;
  import rhs_pkg::*;

  localparam int N = 52;
  localparam int LAT = PRE_CYCLES_DEF + RD_CYCLES_DEF + WR_CYCLES_DEF;

  logic            clk = 0, rst_n;
  logic            issue_valid, issue_ready;
  rhs_op_e         issue_op;
  logic [4:0]      issue_rd;
  logic            wb_valid, wb_is_fp;
  logic [4:0]      wb_rd;
  logic [63:0]     wb_data;
  prob_t [N:0]     p1, p2;
  int              checks = 0, failures = 0;
  int              cyc = 0, stalls = 0;

  rhs_exec_unit dut (.clk, .rst_n, .issue_valid, .issue_ready, .issue_op, .issue_rd,
                     .wb_valid, .wb_rd, .wb_is_fp, .wb_data, .p_p2ap(p1), .p_ap2p(p2));

  always #0.25 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && issue_valid && !issue_ready) stalls++;

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  function automatic logic [63:0] fmt(rhs_op_e op, logic [N-1:0] w);
    unique case (op)
      OP_RAND:    return {49'd0, w[14:0]};
      OP_FRAND_S: return {32'hFFFF_FFFF, 9'd0, w[22:0]};
      default:    return {12'd0, w[51:0]};
    endcase
  endfunction

  // The testbench drives and samples at falling edges; cyc counts rising
  // edges, so an event seen at a falling edge belongs to the edge before.
  // Issue one op, holding it until accepted; returns the acceptance edge.
  task automatic issue(input rhs_op_e op, input logic [4:0] r, output int acc_cyc);
    @(negedge clk);
    issue_valid = 1; issue_op = op; issue_rd = r;
    while (!issue_ready) @(negedge clk);
    @(negedge clk);
    acc_cyc = cyc;
    issue_valid = 0;
  endtask

  task automatic wait_wb(output int wb_cyc);
    do @(negedge clk); while (!wb_valid);
    wb_cyc = cyc;
  endtask

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N:0]   flip;
    logic [N-1:0] mask, word;
    int           a, w, prev_w;
    rhs_op_e      op;
    logic [4:0]   r;

    flip = {$urandom, $urandom};
    flip[N:32] = 21'($urandom);
    for (int i = 0; i <= N; i++) begin
      p1[i] = PROB_ONE;
      p2[i] = flip[i] ? PROB_ONE : prob_t'(0);
    end
    for (int i = 0; i < N; i++) mask[i] = flip[i] ^ flip[i+1];

    rst_n = 0; issue_valid = 0; issue_op = OP_RAND; issue_rd = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    check(issue_ready && !wb_valid, "idle after reset");

    // Warm-up: locked units settle during the first write.
    issue(OP_FRAND_D, 5'd1, a); wait_wb(w);
    check(w - a == LAT, $sformatf("latency %0d cycles", w - a));
    issue(OP_FRAND_D, 5'd2, a);
    check(!issue_ready, "not ready while a period runs");
    wait_wb(w);
    word = wb_data[N-1:0];

    // Predicted sequence, single issue.
    for (int k = 0; k < 30; k++) begin
      op = rhs_op_e'($urandom_range(2)); r = 5'($urandom);
      word = word ^ mask;
      issue(op, r, a); wait_wb(w);
      check(w - a == LAT, $sformatf("latency %0d cycles", w - a));
      check(wb_rd == r && wb_is_fp == (op != OP_RAND), "write-back tag");
      check(wb_data == fmt(op, word), $sformatf("op %0d data %h expected %h", op, wb_data, fmt(op, word)));
      @(negedge clk);
      check(!wb_valid, "write-back lasts one cycle");
    end

    // Back to back: keep issue_valid high, one op completes every LAT cycles.
    prev_w = -1;
    fork
      begin
        for (int k = 0; k < 20; k++) begin
          @(negedge clk);
          issue_valid = 1; issue_op = rhs_op_e'(k % 3); issue_rd = 5'(k);
          while (!issue_ready) @(negedge clk);
        end
        @(negedge clk);
        issue_valid = 0;
      end
      begin
        for (int k = 0; k < 20; k++) begin
          wait_wb(w);
          word = word ^ mask;
          check(wb_rd == 5'(k) && wb_data == fmt(rhs_op_e'(k % 3), word), $sformatf("back-to-back result %0d", k));
          if (prev_w >= 0) check(w - prev_w == LAT, $sformatf("throughput: %0d cycles apart", w - prev_w));
          prev_w = w;
        end
      end
    join
    check(stalls > 100, $sformatf("issue stalled %0d cycles while busy", stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
