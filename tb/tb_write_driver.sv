// tb_write_driver -- exhaustive check of the write driver logic against the
// schematic: with Wr=1, Data_in=1 puts BL high and SL low (current BL->SL,
// writes 1), Data_in=0 the reverse; with Wr=0 the BL pass gate is off.
`timescale 1ns/1ps
module tb_write_driver;
  logic data_in, wr, bl, bl_en, sl;
  int   checks = 0, failures = 0;

  write_driver dut (.data_in, .wr, .bl, .bl_en, .sl);

  initial begin
    #1000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 4; k++) begin
      logic exp_bl, exp_sl, exp_en, and_o;
      {wr, data_in} = 2'(k);
      #1;
      and_o  = wr & data_in;
      exp_bl = and_o;     // P1 pulls BL to VDD1 only when the AND is high
      exp_sl = !and_o;    // P0 pulls SL to VDD2 only when the AND is low
      exp_en = wr;
      checks++;
      if (bl !== exp_bl || sl !== exp_sl || bl_en !== exp_en) begin
        failures++;
        $display("FAIL: wr=%0b data_in=%0b -> bl=%0b sl=%0b bl_en=%0b", wr, data_in, bl, sl, bl_en);
      end
      if (wr) begin
        checks++;
        // Written value = direction of the current: BL above SL writes 1.
        if ((bl && !sl) !== data_in) begin
          failures++;
          $display("FAIL: current direction does not write Data_in=%0b", data_in);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
