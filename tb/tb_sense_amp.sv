// tb_sense_amp -- self-checking test of the pre-charge sense amplifier
// model: both outputs high while pre-charged, out = cell value and
// out_n = inverse after Rd rises, and the latched value held while Rd stays
// high even when the cell changes.
`timescale 1ns/1ps
module tb_sense_amp;
  logic rd, r_high, out, out_n;
  int   checks = 0, failures = 0;

  sense_amp dut (.rd, .r_high, .out, .out_n);

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (out=%0b out_n=%0b)", msg, out, out_n);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd = 0; r_high = 0;
    for (int k = 0; k < 40; k++) begin
      logic v;
      v = 1'($urandom_range(1, 0));
      rd = 0; r_high = ~v; #0.2;
      check(out == 1'b1 && out_n == 1'b1, "pre-charge: both nodes high");
      r_high = v; #0.1;
      rd = 1; #0.2;
      check(out == v && out_n == ~v, $sformatf("read %0b", v));
      r_high = ~v; #2.9;        // the write flips the cell
      check(out == v && out_n == ~v, "value held through the write");
      rd = 0; #0.1;
      check(out == 1'b1 && out_n == 1'b1, "back to pre-charge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
