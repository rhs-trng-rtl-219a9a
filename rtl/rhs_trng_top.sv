// rhs_trng_top -- the RHS-TRNG slice of a RISC-V core's execute stage: the
// custom-instruction decoder and the TRNG execution unit with its MTJ array.
//
// The issue stage presents an instruction word (instr_valid, instr).  If it
// is rand, frand.s or frand.d the unit accepts it when free (instr_ready) and
// writes the random result back 8 cycles later on the wb_* port; any other
// instruction is flagged instr_is_trng = 0, never blocked and never executed
// here, so it goes to the other units.  rs1_idx/rs2_idx are the source
// register fields of the frand instructions, for the core's register read.
// The per-unit MTJ switching probabilities are brought out as ports: they
// are the operating point of the analog array (supplies, temperature,
// process) that a testbench sets.
//
// The host core, caches and memory are outside this design.  From the
// paper: the set of blocks and their order.  Own choices: the port list and
// the non-blocking pass of other instructions.
`timescale 1ns/1ps
module rhs_trng_top
  import rhs_pkg::*;
#(
  parameter int unsigned N_BITS = FRAC_D_BITS,
  parameter logic [31:0] SEED   = 32'h2545_F491   // MTJ model noise seed
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              instr_valid,
  input  logic [31:0]       instr,
  output logic              instr_ready,
  output logic              instr_is_trng,
  output logic [4:0]        rs1_idx,
  output logic [4:0]        rs2_idx,
  output logic              wb_valid,
  output logic [4:0]        wb_rd,
  output logic              wb_is_fp,
  output logic [FLEN-1:0]   wb_data,
  input  prob_t [N_BITS:0]  p_p2ap,
  input  prob_t [N_BITS:0]  p_ap2p
);

  rhs_op_e    dec_op;
  logic [4:0] dec_rd;
  logic       dec_rd_is_fp_unused;
  logic       issue_ready;

  rhs_decoder u_dec (
    .instr    (instr),
    .valid    (instr_is_trng),
    .op       (dec_op),
    .rd       (dec_rd),
    .rs1      (rs1_idx),
    .rs2      (rs2_idx),
    .rd_is_fp (dec_rd_is_fp_unused)
  );

  rhs_exec_unit #(.N_BITS(N_BITS), .SEED(SEED)) u_exec (
    .clk         (clk),
    .rst_n       (rst_n),
    .issue_valid (instr_valid && instr_is_trng),
    .issue_ready (issue_ready),
    .issue_op    (dec_op),
    .issue_rd    (dec_rd),
    .wb_valid    (wb_valid),
    .wb_rd       (wb_rd),
    .wb_is_fp    (wb_is_fp),
    .wb_data     (wb_data),
    .p_p2ap      (p_p2ap),
    .p_ap2p      (p_ap2p)
  );

  assign instr_ready = !instr_is_trng || issue_ready;

endmodule
