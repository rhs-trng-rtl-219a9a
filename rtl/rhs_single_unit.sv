// rhs_single_unit -- one RHS-TRNG generator unit (RHS-SingleUnit).
//
// A 1T-1MTJ bit with its own sense amplifier and write driver on the shared
// BL/SL pair.  The sense amplifier's inverted output is wired back to the
// write driver's Data_in, so every generation period is:
//   read  (Rd: 0 -> 1)  out = present MTJ state, out_n = its inverse
//   write (Wr = 1)      the inverse is written; the MTJ flips with
//                       probability P1 (from P) or P2 (from AP)
// No reset phase is needed: the write always pushes the cell away from the
// state it holds, with the current direction chosen by the read-out.  In
// steady state the unit reads 1 with probability P1 / (P1 + P2).
//
// Interface: wl, rd and wr come from the phase controller; out is the random
// bit, valid while rd is high.  p_p2ap / p_ap2p are the behavioural MTJ's
// operating point.  The structure follows the paper's unit schematic; the
// unit has no clock of its own.
`timescale 1ns/1ps
module rhs_single_unit
  import rhs_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h2545_F491   // MTJ model noise seed
) (
  input  logic  wl,
  input  logic  rd,
  input  logic  wr,
  input  prob_t p_p2ap,
  input  prob_t p_ap2p,
  output logic  out,
  output logic  out_n,
  output logic  mtj_state   // observation only: the junction's state
);

  logic bl, bl_en, sl, r_high;

  mtj_device #(.SEED(SEED)) u_mtj (
    .wl     (wl),
    .bl     (bl),
    .bl_en  (bl_en),
    .sl     (sl),
    .p_p2ap (p_p2ap),
    .p_ap2p (p_ap2p),
    .r_high (r_high),
    .state  (mtj_state)
  );

  sense_amp u_sa (
    .rd     (rd),
    .r_high (r_high),
    .out    (out),
    .out_n  (out_n)
  );

  write_driver u_wd (
    .data_in (out_n),
    .wr      (wr),
    .bl      (bl),
    .bl_en   (bl_en),
    .sl      (sl)
  );

endmodule
