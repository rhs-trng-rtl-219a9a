// rhs_cell -- one complete RHS-TRNG cell: two identical generator units
// (Unit 0, Unit 1) whose outputs are combined by an XOR gate.
//
// Each unit alone reads 1 with probability P1/(P1+P2), which already stays at
// 1/2 when P1 and P2 drift together.  The XOR pulls the remaining bias
// further towards 1/2:  P(rnd=1) = p0(1-p1) + p1(1-p0), with p0, p1 the two
// units' probabilities of a 1.  Both units share WL, Rd and Wr, so one
// generation period yields one bit.  rnd is valid while rd is high (after
// the read phase); unit_out exposes the two unit outputs so a wider array
// can share Unit 1 with its neighbour.
//
// Structure as in the paper's cell schematic; no clock of its own.
`timescale 1ns/1ps
module rhs_cell
  import rhs_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h2545_F491   // MTJ model noise seed
) (
  input  logic        wl,
  input  logic        rd,
  input  logic        wr,
  input  prob_t [1:0] p_p2ap,
  input  prob_t [1:0] p_ap2p,
  output logic        rnd,
  output logic  [1:0] unit_out,
  output logic  [1:0] mtj_state
);

  for (genvar u = 0; u < 2; u++) begin : g_unit
    logic out_n_unused;
    rhs_single_unit #(.SEED(seed_mix(SEED, u))) u_unit (
      .wl        (wl),
      .rd        (rd),
      .wr        (wr),
      .p_p2ap    (p_p2ap[u]),
      .p_ap2p    (p_ap2p[u]),
      .out       (unit_out[u]),
      .out_n     (out_n_unused),
      .mtj_state (mtj_state[u])
    );
  end

  assign rnd = unit_out[0] ^ unit_out[1];

endmodule
