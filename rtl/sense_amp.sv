// sense_amp -- behavioural model of the pre-charge sense amplifier (PCSA)
// that reads one MTJ.  Not synthesizable: it stands for an analog circuit
// (P0..P3, N0..N2 and a reference MTJ R_ref).
//
// Rd = 0 is pre-charge: both output nodes are pulled high, so out and out_n
// both read 1.  On the rising edge of Rd the nodes discharge, the branch with
// the lower resistance faster, and the cross-coupled inverters amplify the
// difference to full swing: out takes the cell's logic value (1 when the
// BL-SL path is above the reference, i.e. AP) and out_n its inverse.  The
// result is latched for as long as Rd stays high, so a change of the MTJ
// during the following write does not reach the outputs.
//
// From the paper: the three read stages and both nodes pre-charged to the
// same level.  Own choices: holding the result while Rd stays high through
// the write, so Data_in cannot follow the cell as it is written, and
// collapsing development and amplification into the Rd edge (the paper
// gives it as under 0.2 ns; the controller allots it a full clock).
`timescale 1ns/1ps
module sense_amp (
  input  logic rd,       // 0: pre-charge, 1: develop, amplify and hold
  input  logic r_high,   // cell path resistance above the reference
  output logic out,      // node B
  output logic out_n     // node A
);

  logic latched;

  always @(posedge rd) latched <= r_high;

  assign out   = rd ? latched  : 1'b1;
  assign out_n = rd ? ~latched : 1'b1;

endmodule
