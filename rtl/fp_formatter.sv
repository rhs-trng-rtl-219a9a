// fp_formatter -- turns the array's random bits into the register value of
// each TRNG instruction.
//
//   rand     integer register:  bits[14:0] zero-extended (0 .. 32767)
//   frand.s  RV32F register:    sign 0, exponent 00000000, fraction bits[22:0]
//   frand.d  RV32D register:    sign 0, exponent 00000000000, fraction bits[51:0]
//
// A uniform exponent would not give a uniform value, so sign and exponent
// are forced to zero and only the fraction is random: the result is a
// subnormal number, fraction / 2**23 (or 2**52) times the smallest normal
// power of two.  Read as an unsigned fraction it is uniform on [0, 1).
// Combinational.  data is FLEN (64) bits; an integer result uses the low
// XLEN bits.  For frand.s the upper 32 bits are set to ones (NaN-boxing of a
// single value in a 64-bit FP register, as the RISC-V D extension requires).
//
// Bit positions and the zero sign/exponent follow the paper's conversion
// figure.  Own choices: the NaN-boxing (the figure leaves the upper half
// blank) and zero-filling of fraction bits the array does not supply when
// N_BITS is set below 52.
`timescale 1ns/1ps
module fp_formatter
  import rhs_pkg::*;
#(
  parameter int unsigned N_BITS = FRAC_D_BITS
) (
  input  rhs_op_e           op,
  input  logic [N_BITS-1:0] bits,
  output logic [FLEN-1:0]   data,
  output logic              is_fp
);

  logic [FLEN-1:0] ext;

  always_comb begin
    ext = '0;
    for (int i = 0; i < N_BITS && i < FLEN; i++) ext[i] = bits[i];

    unique case (op)
      OP_RAND:    data = {{(FLEN - RAND_BITS){1'b0}}, ext[RAND_BITS-1:0]};
      OP_FRAND_S: data = {32'hFFFF_FFFF, 1'b0, 8'h00, ext[FRAC_S_BITS-1:0]};
      OP_FRAND_D: data = {1'b0, 11'h000, ext[FRAC_D_BITS-1:0]};
      default:    data = '0;
    endcase
    is_fp = (op != OP_RAND);
  end

endmodule
