// tb_rhs_decoder -- self-checking test of the custom instruction decoder.
// Encodes rand, frand.s and frand.d with random register fields and checks
// op, rd, rs1, rs2 and the FP-destination flag; then checks near misses
// (one field wrong: funct7, funct3, opcode, non-zero rs of rand) and common
// base/F/D instructions (JAL, FADD.S, FMUL.D, ADD) are not decoded.
`timescale 1ns/1ps
module tb_rhs_decoder;
  import rhs_pkg::*;

  logic [31:0] instr;
  logic        valid, rd_is_fp;
  rhs_op_e     op;
  logic [4:0]  rd, rs1, rs2;
  int          checks = 0, failures = 0;

  rhs_decoder dut (.instr, .valid, .op, .rd, .rs1, .rs2, .rd_is_fp);

  function automatic logic [31:0] enc(logic [6:0] f7, logic [4:0] r2, logic [4:0] r1,
                                      logic [2:0] f3, logic [4:0] d, logic [6:0] opc);
    return {f7, r2, r1, f3, d, opc};
  endfunction

  task automatic expect_hit(input logic [31:0] w, input rhs_op_e e_op, input logic [4:0] e_rd,
                            input logic [4:0] e_rs1, input logic [4:0] e_rs2, input logic e_fp);
    instr = w; #1;
    checks++;
    if (!valid || op != e_op || rd != e_rd || rd_is_fp != e_fp ||
        (e_fp && (rs1 != e_rs1 || rs2 != e_rs2))) begin
      failures++;
      $display("FAIL: %h -> valid=%0b op=%0d rd=%0d rs1=%0d rs2=%0d fp=%0b", w, valid, op, rd, rs1, rs2, rd_is_fp);
    end
  endtask

  task automatic expect_miss(input logic [31:0] w, input string what);
    instr = w; #1;
    checks++;
    if (valid) begin
      failures++;
      $display("FAIL: %s (%h) decoded as TRNG op %0d", what, w, op);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      logic [4:0] d, a, b;
      d = 5'($urandom); a = 5'($urandom); b = 5'($urandom);
      expect_hit(enc(7'b0000001, 5'd0, 5'd0, 3'b000, d, 7'b1101111), OP_RAND, d, 0, 0, 1'b0);
      expect_hit(enc(7'b0011000, b, a, 3'b000, d, 7'b1010011), OP_FRAND_S, d, a, b, 1'b1);
      expect_hit(enc(7'b0011001, b, a, 3'b000, d, 7'b1010011), OP_FRAND_D, d, a, b, 1'b1);
      expect_miss(enc(7'b0011000, b, a, 3'b000 | 3'(1 + $urandom_range(6)), d, 7'b1010011), "frand.s with funct3 != 0");
      expect_miss(enc(7'b0011010, b, a, 3'b000, d, 7'b1010011), "funct7 0011010");
      expect_miss(enc(7'b0000000, b, a, 3'b000, d, 7'b1010011), "FADD.S");
      expect_miss(enc(7'b0001001, b, a, 3'b111, d, 7'b1010011), "FMUL.D");
      expect_miss(enc(7'b0011000, b, a, 3'b000, d, 7'b0110011), "frand.s funct7 on OP");
      expect_miss(enc(7'b0000000, b, a, 3'b000, d, 7'b0110011), "ADD");
      if (a != 0) expect_miss(enc(7'b0000001, 5'd0, a, 3'b000, d, 7'b1101111), "rand with rs1 != 0");
      if (b != 0) expect_miss(enc(7'b0000001, b, 5'd0, 3'b000, d, 7'b1101111), "rand with rs2 != 0");
      expect_miss(enc(7'b0000010, 5'd0, 5'd0, 3'b000, d, 7'b1101111), "JAL with other immediate");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
