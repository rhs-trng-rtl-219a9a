// mtj_device -- behavioural model of one 1T-1MTJ bit: a perpendicular
// STT-MTJ in series with its NMOS selector (word line WL).  It stands for
// an analog, process-specific device; it is not meant for synthesis.
//
// State: 1 = anti-parallel (AP, high resistance), 0 = parallel (P, low
// resistance).  A write current flows while the selector is on (wl), the
// write driver has its bit-line pass gate on (bl_en) and BL and SL sit at
// different levels.  BL high / SL low drives current from BL to SL and
// writes towards 1 (AP); SL high / BL low writes towards 0 (P).  Switching is
// stochastic: when the pulse ends, a cell in P driven towards AP switches
// with probability p_p2ap (P1 in the paper's state diagram) and a cell in AP
// driven towards P switches with probability p_ap2p (P2).  A pulse that
// drives the cell towards the state it already holds changes nothing.  The
// two probabilities are model inputs rather than device pins: they stand for
// the operating point set by the supplies VDD1/VDD2, the pulse width, the
// temperature and process spread, so a testbench can sweep them.
//
// The thermal noise behind each switching event is modelled by a 32-bit
// xorshift generator private to the instance, seeded by SEED, stepped once
// per write pulse; its low 16 bits are compared with the probability.  The
// initial magnetic state is taken from the seed as well.
//
// r_high is what a sense amplifier sees across BL/SL: the path resistance is
// above the reference when the cell is in AP, or when the selector is off
// and the path is open.
//
// From the paper: the bipolar write, the P->AP / AP->P probabilities P1 and
// P2, and the series NMOS selector.  Own choices: the abstraction of
// currents to logic levels, applying the switch when the pulse ends (the
// value is sensed before the pulse, so only the order matters), the
// probabilities held as prob_t fractions of 2**16, and the noise generator.
`timescale 1ns/1ps
module mtj_device
  import rhs_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic  wl,        // selector gate (word line)
  input  logic  bl,        // bit-line level driven by the write driver
  input  logic  bl_en,     // write driver's BL pass gate (Wr)
  input  logic  sl,        // source-line level driven by the write driver
  input  prob_t p_p2ap,    // P1: probability P -> AP per write pulse
  input  prob_t p_ap2p,    // P2: probability AP -> P per write pulse
  output logic  r_high,    // BL-SL path resistance above the reference
  output logic  state      // magnetic state, 1 = AP
);

  logic        current_on;  // a write current flows through the junction
  logic        dir_to_ap;   // direction of the present pulse
  logic        mtj_q;
  logic [31:0] noise_q;

  function automatic logic [31:0] xorshift32(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  assign current_on = wl & bl_en & (bl ^ sl);

  initial begin
    noise_q   = (SEED == 32'd0) ? 32'h1 : SEED;
    mtj_q     = SEED[16];
    dir_to_ap = 1'b0;
  end

  // Direction is fixed at the start of the pulse.
  always @(posedge current_on) dir_to_ap <= bl;

  // The outcome of the pulse is decided when it ends.
  always @(negedge current_on) begin
    logic [31:0] n;
    n = xorshift32(noise_q);
    noise_q <= n;
    if (dir_to_ap && !mtj_q && ({1'b0, n[15:0]} < p_p2ap))
      mtj_q <= 1'b1;
    else if (!dir_to_ap && mtj_q && ({1'b0, n[15:0]} < p_ap2p))
      mtj_q <= 1'b0;
  end

  assign state  = mtj_q;
  assign r_high = mtj_q | ~wl;

endmodule
