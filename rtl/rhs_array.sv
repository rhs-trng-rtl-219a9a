// rhs_array -- multi-cell parallel RHS-TRNG: N_BITS random bits per
// generation period from N_BITS+1 generator units.
//
// Adjacent cells share a unit: bit i is unit i XOR unit i+1.  Bit 0 is a full
// two-unit cell (Unit 0, Unit 1); every further bit adds one unit and one XOR
// gate with its lower neighbour.  All units share WL, Rd and Wr, so the whole
// word is produced in one period.  bits is valid while rd is high.
//
// From the paper: the n+1 units / n outputs sharing scheme and bit order of
// the parallel-structure figure, and the 53 units that feed the 52-bit RV32D
// fraction (so N_BITS defaults to 52, which also covers the 23-bit RV32F
// fraction and the 15-bit integer).  Own choice: one array shared by all
// three instructions.
`timescale 1ns/1ps
module rhs_array
  import rhs_pkg::*;
#(
  parameter int unsigned N_BITS = FRAC_D_BITS,
  parameter logic [31:0] SEED   = 32'h2545_F491   // MTJ model noise seed
) (
  input  logic               wl,
  input  logic               rd,
  input  logic               wr,
  input  prob_t [N_BITS:0]   p_p2ap,
  input  prob_t [N_BITS:0]   p_ap2p,
  output logic  [N_BITS-1:0] bits,
  output logic  [N_BITS:0]   unit_out,
  output logic  [N_BITS:0]   mtj_state
);

  if (N_BITS < 1) begin : g_bad_size
    $error("rhs_array: N_BITS must be at least 1");
  end

  // Bit 0: a complete cell built from units 0 and 1.
  rhs_cell #(.SEED(SEED)) u_cell0 (
    .wl        (wl),
    .rd        (rd),
    .wr        (wr),
    .p_p2ap    (p_p2ap[1:0]),
    .p_ap2p    (p_ap2p[1:0]),
    .rnd       (bits[0]),
    .unit_out  (unit_out[1:0]),
    .mtj_state (mtj_state[1:0])
  );

  // Bits 1 .. N_BITS-1: one more unit each, shared with the cell below.
  for (genvar i = 1; i < N_BITS; i++) begin : g_bit
    logic out_n_unused;
    rhs_single_unit #(.SEED(seed_mix(SEED, i + 1))) u_unit (
      .wl        (wl),
      .rd        (rd),
      .wr        (wr),
      .p_p2ap    (p_p2ap[i+1]),
      .p_ap2p    (p_ap2p[i+1]),
      .out       (unit_out[i+1]),
      .out_n     (out_n_unused),
      .mtj_state (mtj_state[i+1])
    );
    assign bits[i] = unit_out[i] ^ unit_out[i+1];
  end

endmodule
