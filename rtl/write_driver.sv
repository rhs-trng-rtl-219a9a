// write_driver -- logic of the bipolar MTJ write driver.
//
// The driver has two push-pull stages, one on SL (P0 to VDD2 / N0 to GND)
// and one on BL (P1 to VDD1 / N1 to GND), and BL reaches the cell through a
// pass transistor enabled by Wr.  Here the product Data_in & Wr drives the
// SL stage and its inverse drives the BL stage.  With Wr = 1 and
// Data_in = 1, BL is high and SL low: current flows from BL to SL and writes
// 1 (AP).  With Wr = 1 and Data_in = 0, BL is low and SL high: the reverse
// current writes 0 (P).  With Wr = 0 the BL pass gate is off and no write
// current flows.  The outputs are the logic levels of the two stages and
// the pass-gate enable; the different supply levels VDD1/VDD2, which set the
// two currents for a 50% switching probability, have no logic counterpart.
//
// From the paper: the transistor names, which pair conducts for Wr = 1,
// Data_in = 1 (BL to SL current, writing 1), and the reversed current for
// Data_in = 0.  This design's own choice: the AND/inverter logic that
// produces those levels, and the idle behaviour with Wr = 0.  Purely
// combinational, no clock.
`timescale 1ns/1ps
module write_driver (
  input  logic data_in,  // value to write (the inverted read-out)
  input  logic wr,       // write enable / pulse
  output logic bl,       // BL stage level, 1 = VDD1
  output logic bl_en,    // BL pass transistor on
  output logic sl        // SL stage level, 1 = VDD2
);

  logic wr_data;   // AND gate output
  logic bl_gate;   // inverter output, gate of P1/N1

  always_comb begin
    wr_data = data_in & wr;
    bl_gate = ~wr_data;
    bl      = ~bl_gate;   // P1 conducts when its gate is low
    sl      = ~wr_data;   // P0 conducts when its gate is low
    bl_en   = wr;
  end

endmodule
