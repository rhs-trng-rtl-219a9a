// tb_rhs_trng_top -- end-to-end test of the TRNG execute-stage slice at its
// default parameters (52-bit array of 53 MTJ units, 8-cycle period).
//
// Instruction words are built from the custom encodings and presented as an
// issue stage would, mixed with ordinary instructions.  Phase 1 sets every
// unit to flip every period or to lock, by a random pattern, so each result
// is predicted exactly (see tb_rhs_exec_unit).  Phase 2 runs all units at the
// nominal 50% operating point and checks the balance of the generated bits
// and that frand.d values, read as fractions, average about 0.5.
// Mechanisms counted, each must occur: rand, frand.s, frand.d executed, a
// TRNG instruction stalled while the unit is busy, an ordinary instruction
// passed through without stall or write-back, a back-to-back issue, and MTJ
// switches in both directions (P->AP and AP->P, seen on the array's
// observation outputs).
`timescale 1ns/1ps
module tb_rhs_trng_top;
  import rhs_pkg::*;

  localparam int N = FRAC_D_BITS;
  localparam int LAT = PRE_CYCLES_DEF + RD_CYCLES_DEF + WR_CYCLES_DEF;

  logic        clk = 0, rst_n;
  logic        instr_valid, instr_ready, instr_is_trng;
  logic [31:0] instr;
  logic [4:0]  rs1_idx, rs2_idx, wb_rd;
  logic        wb_valid, wb_is_fp;
  logic [63:0] wb_data;
  prob_t [N:0] p1, p2;
  int          checks = 0, failures = 0, cyc = 0;

  // mechanism counters
  int n_rand = 0, n_frand_s = 0, n_frand_d = 0, n_stall = 0, n_other = 0;
  int n_b2b = 0, n_p2ap = 0, n_ap2p = 0, n_wb = 0;

  rhs_trng_top dut (.clk, .rst_n, .instr_valid, .instr, .instr_ready, .instr_is_trng,
                    .rs1_idx, .rs2_idx, .wb_valid, .wb_rd, .wb_is_fp, .wb_data,
                    .p_p2ap(p1), .p_ap2p(p2));

  always #0.25 clk = ~clk;
  always @(posedge clk) cyc++;

  // MTJ switch directions, from the array's observation outputs.
  logic [N:0] mtj_prev;
  always @(posedge clk) begin
    logic [N:0] now;
    now = dut.u_exec.mtj_state_obs;
    if (rst_n) begin
      n_p2ap += $countones(now & ~mtj_prev);
      n_ap2p += $countones(~now & mtj_prev);
    end
    mtj_prev <= now;
  end

  always @(negedge clk) begin
    if (rst_n && instr_valid && instr_is_trng && !instr_ready) n_stall++;
    if (wb_valid) n_wb++;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  function automatic logic [31:0] enc(rhs_op_e op, logic [4:0] rd, logic [4:0] rs1, logic [4:0] rs2);
    unique case (op)
      OP_RAND:    return {7'b0000001, 5'd0, 5'd0, 3'b000, rd, 7'b1101111};
      OP_FRAND_S: return {7'b0011000, rs2, rs1, 3'b000, rd, 7'b1010011};
      default:    return {7'b0011001, rs2, rs1, 3'b000, rd, 7'b1010011};
    endcase
  endfunction

  function automatic logic [63:0] fmt(rhs_op_e op, logic [N-1:0] w);
    unique case (op)
      OP_RAND:    return {49'd0, w[14:0]};
      OP_FRAND_S: return {32'hFFFF_FFFF, 9'd0, w[22:0]};
      default:    return {12'd0, w[51:0]};
    endcase
  endfunction

  // Present an instruction at a falling edge, hold until accepted.
  task automatic send(input logic [31:0] w, output int acc_cyc);
    @(negedge clk);
    instr_valid = 1; instr = w;
    while (!instr_ready) @(negedge clk);
    @(negedge clk);
    acc_cyc = cyc;
    instr_valid = 0;
  endtask

  task automatic count_op(input rhs_op_e op);
    case (op)
      OP_RAND:    n_rand++;
      OP_FRAND_S: n_frand_s++;
      default:    n_frand_d++;
    endcase
  endtask

  // Ordinary instruction while the unit is busy: must not stall, must not
  // be taken as a TRNG op.
  task automatic send_other(input logic [31:0] w);
    @(negedge clk);
    instr_valid = 1; instr = w;
    #0.01;
    check(!instr_is_trng && instr_ready, $sformatf("ordinary instruction %h passes", w));
    n_other++;
    @(negedge clk);
    instr_valid = 0;
  endtask

  task automatic wait_wb(output int wb_cyc);
    do @(negedge clk); while (!wb_valid);
    wb_cyc = cyc;
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N:0]   flip;
    logic [N-1:0] mask, word;
    int           a, w, prev_w, ones, wb_before;
    real          frac_sum;
    rhs_op_e      op;
    logic [4:0]   r, s1, s2;

    flip = {21'($urandom), $urandom, $urandom} | 53'h1;   // at least one flipper
    flip[1] = 1'b0;                                       // and one locked unit
    for (int i = 0; i <= N; i++) begin
      p1[i] = PROB_ONE;
      p2[i] = flip[i] ? PROB_ONE : prob_t'(0);
    end
    for (int i = 0; i < N; i++) mask[i] = flip[i] ^ flip[i+1];

    rst_n = 0; instr_valid = 0; instr = 32'h0000_0013;  // NOP
    repeat (3) @(posedge clk);
    rst_n <= 1;

    // ---- phase 1: exact prediction ----
    send(enc(OP_FRAND_D, 5'd1, 5'd0, 5'd0), a); wait_wb(w);
    send(enc(OP_FRAND_D, 5'd2, 5'd0, 5'd0), a); wait_wb(w);
    word = wb_data[N-1:0];
    for (int k = 0; k < 24; k++) begin
      op = rhs_op_e'(k % 3); r = 5'($urandom); s1 = 5'($urandom); s2 = 5'($urandom);
      word = word ^ mask;
      send(enc(op, r, s1, s2), a);
      if (op != OP_RAND) check(rs1_idx == s1 && rs2_idx == s2, "source fields");
      wb_before = n_wb;
      send_other(32'h00B5_0533);                       // ADD while busy
      send_other({7'b0000010, 5'd0, 5'd0, 3'b000, 5'd3, 7'b1101111});  // a JAL
      wait_wb(w);
      #0.01;
      check(n_wb == wb_before + 1, "ordinary instructions produce no write-back");
      check(w - a == LAT, $sformatf("latency %0d", w - a));
      check(wb_rd == r && wb_is_fp == (op != OP_RAND), "write-back tag");
      check(wb_data == fmt(op, word), $sformatf("result %h expected %h", wb_data, fmt(op, word)));
      count_op(op);
    end

    // back to back with stalls: the next TRNG instruction waits
    prev_w = -1;
    fork
      for (int k = 0; k < 9; k++) begin
        @(negedge clk);
        instr_valid = 1; instr = enc(rhs_op_e'(k % 3), 5'(k + 1), 5'd4, 5'd5);
        while (!instr_ready) @(negedge clk);
      end
      for (int k = 0; k < 9; k++) begin
        wait_wb(w);
        word = word ^ mask;
        check(wb_rd == 5'(k + 1) && wb_data == fmt(rhs_op_e'(k % 3), word), $sformatf("back-to-back %0d", k));
        if (prev_w >= 0) begin
          check(w - prev_w == LAT, "one result every period");
          n_b2b++;
        end
        prev_w = w;
        count_op(rhs_op_e'(k % 3));
      end
    join
    @(negedge clk) instr_valid = 0;

    // ---- phase 2: nominal 50% operating point ----
    for (int i = 0; i <= N; i++) begin p1[i] = PROB_HALF; p2[i] = PROB_HALF; end
    ones = 0; frac_sum = 0.0;
    for (int k = 0; k < 300; k++) begin
      send(enc(OP_FRAND_D, 5'(k), 5'd0, 5'd0), a); wait_wb(w);
      check(wb_data[63:52] == 12'd0, "frand.d sign and exponent zero");
      ones += $countones(wb_data[51:0]);
      frac_sum += real'(wb_data[51:20]) / 4294967296.0;   // top 32 fraction bits
      count_op(OP_FRAND_D);
    end
    check(ones > 7488 && ones < 8112, $sformatf("ones %0d of 15600 bits", ones));
    check(frac_sum / 300.0 > 0.45 && frac_sum / 300.0 < 0.55,
          $sformatf("mean frand.d fraction %0.3f", frac_sum / 300.0));

    $display("mechanisms: rand=%0d frand.s=%0d frand.d=%0d stall_cycles=%0d ordinary=%0d back_to_back=%0d P->AP=%0d AP->P=%0d",
             n_rand, n_frand_s, n_frand_d, n_stall, n_other, n_b2b, n_p2ap, n_ap2p);
    check(n_rand > 0,    "rand executed");
    check(n_frand_s > 0, "frand.s executed");
    check(n_frand_d > 0, "frand.d executed");
    check(n_stall > 0,   "TRNG instruction stalled while busy");
    check(n_other > 0,   "ordinary instruction passed");
    check(n_b2b > 0,     "back-to-back issue");
    check(n_p2ap > 0,    "P->AP switching");
    check(n_ap2p > 0,    "AP->P switching");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
