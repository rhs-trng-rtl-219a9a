// rhs_decoder -- decodes the three custom TRNG instructions.
//
//   rand     funct7=0000001 rs2=00000 rs1=00000 funct3=000 rd opcode=1101111
//   frand.s  funct7=0011000 rs2       rs1       funct3=000 rd opcode=1010011
//   frand.d  funct7=0011001 rs2       rs1       funct3=000 rd opcode=1010011
//
// rand returns an unsigned integer 0..32767 to an integer register and takes
// no operands; frand.s / frand.d return single / double precision values to
// a floating-point register and name two source registers, passed on as
// rs1/rs2 for the host core's register read.  Purely combinational.
//
// All field values are the paper's.  Note that 1101111 is the major opcode
// of JAL in the base ISA, so a core using this encoding must give the rand
// match priority over JAL (a JAL whose immediate bits happen to match is
// read as rand); that is the paper's choice of encoding, kept as printed.
`timescale 1ns/1ps
module rhs_decoder
  import rhs_pkg::*;
(
  input  logic [31:0] instr,
  output logic        valid,   // instr is one of the three TRNG instructions
  output rhs_op_e     op,
  output logic [4:0]  rd,
  output logic [4:0]  rs1,
  output logic [4:0]  rs2,
  output logic        rd_is_fp // destination is a floating-point register
);

  logic [6:0] opcode, funct7;
  logic [2:0] funct3;
  logic       is_rand, is_frand_s, is_frand_d;

  always_comb begin
    opcode = instr[6:0];
    funct3 = instr[14:12];
    funct7 = instr[31:25];
    rd     = instr[11:7];
    rs1    = instr[19:15];
    rs2    = instr[24:20];

    is_rand    = (opcode == OPC_RAND)  && (funct7 == F7_RAND) && (funct3 == F3_TRNG)
              && (rs1 == 5'd0) && (rs2 == 5'd0);
    is_frand_s = (opcode == OPC_FRAND) && (funct7 == F7_FRAND_S) && (funct3 == F3_TRNG);
    is_frand_d = (opcode == OPC_FRAND) && (funct7 == F7_FRAND_D) && (funct3 == F3_TRNG);

    valid    = is_rand || is_frand_s || is_frand_d;
    rd_is_fp = is_frand_s || is_frand_d;
    op       = is_frand_d ? OP_FRAND_D : (is_frand_s ? OP_FRAND_S : OP_RAND);
  end

endmodule
