// rhs_exec_unit -- the RHS-TRNG instruction execution unit that sits beside
// the ALUs, FP and load/store units in the execute/write-back stage.
//
// An issued TRNG op (rand, frand.s, frand.d) starts one generation period of
// the shared N_BITS-wide array.  The unit captures the array's bits at the
// end of the read phase, lets the write phase re-randomise the MTJs for the
// next period, and at the end of the write phase presents the formatted
// result with its destination register for one cycle on the write-back
// port.  Latency from issue to write-back is PRE+RD+WR cycles, 8 with the
// defaults (8 cycles in the paper's system configuration).  A new op can be
// issued in the cycle the previous one writes back, so one op completes
// every 8 cycles; while a period is running issue_ready is low and the issue
// stage must hold the op (a structural stall).
//
//   issue:      issue_valid && issue_ready accepts {issue_op, issue_rd}
//   write-back: wb_valid (1 cycle), wb_rd, wb_is_fp, wb_data (FLEN bits)
//
// From the paper: the placement as an execution unit, the three ops, the
// result formats and the 8-cycle latency.  Own choices: the valid/ready
// issue handshake, back-to-back issue, capturing the word at the end of the
// read phase, and the asynchronous active-low reset.  frand.s and frand.d
// return the raw [0, 1) fraction; the scaling to the range held in rs1/rs2
// that the paper mentions is not done here (its method is not described).
`timescale 1ns/1ps
module rhs_exec_unit
  import rhs_pkg::*;
#(
  parameter int unsigned N_BITS     = FRAC_D_BITS,
  parameter int unsigned PRE_CYCLES = PRE_CYCLES_DEF,
  parameter int unsigned RD_CYCLES  = RD_CYCLES_DEF,
  parameter int unsigned WR_CYCLES  = WR_CYCLES_DEF,
  parameter logic [31:0] SEED       = 32'h2545_F491   // MTJ model noise seed
) (
  input  logic              clk,
  input  logic              rst_n,
  // issue
  input  logic              issue_valid,
  output logic              issue_ready,
  input  rhs_op_e           issue_op,
  input  logic [4:0]        issue_rd,
  // write-back
  output logic              wb_valid,
  output logic [4:0]        wb_rd,
  output logic              wb_is_fp,
  output logic [FLEN-1:0]   wb_data,
  // MTJ operating point of each unit (behavioural model inputs)
  input  prob_t [N_BITS:0]  p_p2ap,
  input  prob_t [N_BITS:0]  p_ap2p
);

  logic              wl, rd, wr, sample, last, busy;
  logic              take;
  logic [N_BITS-1:0] bits, bits_q;
  logic [N_BITS:0]   unit_out_obs, mtj_state_obs;
  rhs_op_e           op_q;
  logic [4:0]        rd_q;
  logic [FLEN-1:0]   fmt_data;
  logic              fmt_is_fp;

  assign take = issue_valid && issue_ready;

  phase_ctrl #(
    .PRE_CYCLES (PRE_CYCLES),
    .RD_CYCLES  (RD_CYCLES),
    .WR_CYCLES  (WR_CYCLES)
  ) u_ctrl (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (issue_valid),
    .ready  (issue_ready),
    .busy   (busy),
    .wl     (wl),
    .rd     (rd),
    .wr     (wr),
    .sample (sample),
    .last   (last)
  );

  rhs_array #(.N_BITS(N_BITS), .SEED(SEED)) u_array (
    .wl        (wl),
    .rd        (rd),
    .wr        (wr),
    .p_p2ap    (p_p2ap),
    .p_ap2p    (p_ap2p),
    .bits      (bits),
    .unit_out  (unit_out_obs),
    .mtj_state (mtj_state_obs)
  );

  fp_formatter #(.N_BITS(N_BITS)) u_fmt (
    .op    (op_q),
    .bits  (bits_q),
    .data  (fmt_data),
    .is_fp (fmt_is_fp)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q     <= OP_RAND;
      rd_q     <= '0;
      bits_q   <= '0;
      wb_valid <= 1'b0;
      wb_rd    <= '0;
      wb_is_fp <= 1'b0;
      wb_data  <= '0;
    end else begin
      if (sample) bits_q <= bits;
      wb_valid <= last;
      if (last) begin
        wb_rd    <= rd_q;
        wb_is_fp <= fmt_is_fp;
        wb_data  <= fmt_data;
      end
      if (take) begin
        op_q <= issue_op;
        rd_q <= issue_rd;
      end
    end
  end

  a_legal_op : assert property (@(posedge clk) disable iff (!rst_n)
    take |-> (issue_op inside {OP_RAND, OP_FRAND_S, OP_FRAND_D}));
  // With a write phase of at least one cycle, two results never arrive on
  // consecutive cycles.
  a_wb_pulse : assert property (@(posedge clk) disable iff (!rst_n) wb_valid |=> !wb_valid);
  a_no_idle_wb : assert property (@(posedge clk) disable iff (!rst_n) last |-> busy);

endmodule
