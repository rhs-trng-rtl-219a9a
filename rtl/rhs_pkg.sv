// rhs_pkg -- types and constants shared by the RHS-TRNG blocks.
//
// Holds the encodings of the three custom RISC-V instructions (rand,
// frand.s, frand.d), the op type that travels from the decoder to the
// execution unit, the widths of the integer and floating-point results, the
// default phase timing of one generation period, and the fixed-point type
// used by the MTJ behavioural model for switching probabilities.
//
// Taken from the paper: every opcode/funct field value (the instruction
// format figure), the 0..32767 integer range (15 bits), the 23/52-bit
// fractions with zero sign and exponent, and the 1/1/6-cycle relaxed phase
// timing at 2 GHz (0.5 ns, 0.5 ns, 3 ns; 8-cycle instruction latency).
// Own choices: the op enum encoding, the 17-bit probability type and the
// seeding of the MTJ models' noise generators.
`timescale 1ns/1ps
package rhs_pkg;

  // ---- custom instruction encodings (bits 31:25, 14:12, 6:0) ----
  localparam logic [6:0] OPC_RAND    = 7'b1101111;
  localparam logic [6:0] OPC_FRAND   = 7'b1010011;
  localparam logic [6:0] F7_RAND     = 7'b0000001;
  localparam logic [6:0] F7_FRAND_S  = 7'b0011000;
  localparam logic [6:0] F7_FRAND_D  = 7'b0011001;
  localparam logic [2:0] F3_TRNG     = 3'b000;

  // ---- result formats ----
  localparam int unsigned RAND_BITS   = 15;  // rand: 0 .. 32767
  localparam int unsigned FRAC_S_BITS = 23;  // RV32F fraction
  localparam int unsigned FRAC_D_BITS = 52;  // RV32D fraction
  localparam int unsigned XLEN        = 32;  // integer register width
  localparam int unsigned FLEN        = 64;  // FP register width (D extension)

  // ---- default phase timing, in core clock cycles (2 GHz clock) ----
  localparam int unsigned PRE_CYCLES_DEF = 1;  // pre-charge   0.5 ns
  localparam int unsigned RD_CYCLES_DEF  = 1;  // sense        0.5 ns
  localparam int unsigned WR_CYCLES_DEF  = 6;  // write pulse  3.0 ns

  // ---- operations of the TRNG execution unit ----
  typedef enum logic [1:0] {
    OP_RAND    = 2'd0,
    OP_FRAND_S = 2'd1,
    OP_FRAND_D = 2'd2
  } rhs_op_e;

  // ---- switching probability, fixed point: value / 2**16, 0 .. 1.0 ----
  localparam int unsigned PROB_FRAC = 16;
  typedef logic [PROB_FRAC:0] prob_t;
  localparam prob_t PROB_ONE  = prob_t'(1 << PROB_FRAC);
  localparam prob_t PROB_HALF = prob_t'(1 << (PROB_FRAC - 1));

  // ---- seeds of the behavioural MTJ models' noise generators ----
  // Spreads one base seed over the units of an array (golden-ratio step),
  // never returning zero, which would stall a xorshift generator.
  function automatic logic [31:0] seed_mix(logic [31:0] base, int unsigned idx);
    logic [31:0] s;
    s = base ^ (32'(idx + 1) * 32'h9E37_79B9);
    return (s == 32'd0) ? 32'h1 : s;
  endfunction

endpackage
