// tb_fp_formatter -- self-checking test of the result formats at the default
// 52-bit width.  For random words it checks the integer result (0..32767,
// low 15 bits), the RV32F image (NaN-boxed, sign and exponent zero,
// fraction = bits[22:0]) and the RV32D image (sign and exponent zero,
// fraction = bits[51:0]); the FP results read as reals must be
// non-negative and below the smallest normal number.
`timescale 1ns/1ps
module tb_fp_formatter;
  import rhs_pkg::*;

  rhs_op_e      op;
  logic [51:0]  bits;
  logic [63:0]  data;
  logic         is_fp;
  int           checks = 0, failures = 0;

  fp_formatter dut (.op, .bits, .data, .is_fp);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s bits=%h data=%h", msg, bits, data);
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
    for (int k = 0; k < 300; k++) begin
      int unsigned iv;
      real         dv;
      bits = {20'($urandom), $urandom};
      op = OP_RAND; #1;
      iv = data[31:0];
      check(!is_fp, "rand is an integer result");
      check(data[63:32] == 0 && iv <= 32767 && iv == (bits % (1 << 15)), "rand value");
      op = OP_FRAND_S; #1;
      check(is_fp, "frand.s is an FP result");
      check(data[63:32] == 32'hFFFF_FFFF, "frand.s NaN-boxed");
      check(data[31] == 1'b0 && data[30:23] == 8'd0, "frand.s sign and exponent zero");
      check(data[22:0] == bits[22:0], "frand.s fraction");
      op = OP_FRAND_D; #1;
      check(is_fp, "frand.d is an FP result");
      check(data[63] == 1'b0 && data[62:52] == 11'd0, "frand.d sign and exponent zero");
      check(data[51:0] == bits, "frand.d fraction");
      dv = $bitstoreal(data);
      check(dv >= 0.0 && dv < 2.2250738585072014e-308, "frand.d is a non-negative subnormal");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
