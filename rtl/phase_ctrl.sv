// phase_ctrl -- sequencer for one two-phase generation period.
//
// A period has no reset phase.  It is a read phase, split into pre-charge
// (Rd = 0) and sensing (Rd = 1), then a write phase (Wr = 1 with Rd still
// high, so the sense amplifier keeps its result and Data_in stays stable).
// WL, the selector gate, is on for the whole period.  When idle all three
// signals are low (sense amplifiers pre-charged, no current).
//
//   state  cycles      wl rd wr
//   IDLE   -            0  0  0
//   PRE    PRE_CYCLES   1  0  0
//   READ   RD_CYCLES    1  1  0   sample = 1 in the last cycle
//   WRITE  WR_CYCLES    1  1  1   last   = 1 in the last cycle
//
// start is accepted (ready = 1) when idle and in the last write cycle, so
// periods can run back to back: with the defaults 1/1/6 a period takes
// 8 clocks, at 2 GHz the 0.5 ns + 0.5 ns + 3 ns relaxed timing the paper
// uses for its system model (3.3 ns at circuit level: <0.2, <0.2, ~2.9 ns).
// A start accepted at clock edge k gives sample at the edge k+PRE+RD and
// last at the edge k+PRE+RD+WR.  Outputs are decoded from registered state.
//
// From the paper: the phase order, Rd high through the write, and the cycle
// counts.  Own choices: WL timing, the idle levels, back-to-back starts and
// the asynchronous active-low reset.
`timescale 1ns/1ps
module phase_ctrl
  import rhs_pkg::*;
#(
  parameter int unsigned PRE_CYCLES = PRE_CYCLES_DEF,
  parameter int unsigned RD_CYCLES  = RD_CYCLES_DEF,
  parameter int unsigned WR_CYCLES  = WR_CYCLES_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,    // begin a period (taken when ready)
  output logic ready,
  output logic busy,
  output logic wl,
  output logic rd,
  output logic wr,
  output logic sample,   // last read cycle: bits valid, capture at this edge
  output logic last      // last write cycle: period ends at this edge
);

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_READ, S_WRITE} phase_e;

  localparam int unsigned MAXC = (PRE_CYCLES > RD_CYCLES)
                               ? ((PRE_CYCLES > WR_CYCLES) ? PRE_CYCLES : WR_CYCLES)
                               : ((RD_CYCLES  > WR_CYCLES) ? RD_CYCLES  : WR_CYCLES);
  localparam int unsigned CW = $clog2(MAXC + 1);

  phase_e        state_q, state_d;
  logic [CW-1:0] cnt_q, cnt_d;
  logic          take;

  initial begin
    assert (PRE_CYCLES >= 1 && RD_CYCLES >= 1 && WR_CYCLES >= 1)
      else $error("phase_ctrl: every phase needs at least one cycle");
  end

  assign sample = (state_q == S_READ)  && (cnt_q == CW'(RD_CYCLES - 1));
  assign last   = (state_q == S_WRITE) && (cnt_q == CW'(WR_CYCLES - 1));
  assign ready  = (state_q == S_IDLE) || last;
  assign take   = start && ready;
  assign busy   = (state_q != S_IDLE);
  assign wl     = busy;
  assign rd     = (state_q == S_READ) || (state_q == S_WRITE);
  assign wr     = (state_q == S_WRITE);

  always_comb begin
    state_d = state_q;
    cnt_d   = cnt_q + CW'(1);
    unique case (state_q)
      S_IDLE: begin
        cnt_d = '0;
        if (take) state_d = S_PRE;
      end
      S_PRE:
        if (cnt_q == CW'(PRE_CYCLES - 1)) begin
          state_d = S_READ;
          cnt_d   = '0;
        end
      S_READ:
        if (sample) begin
          state_d = S_WRITE;
          cnt_d   = '0;
        end
      S_WRITE:
        if (last) begin
          state_d = take ? S_PRE : S_IDLE;
          cnt_d   = '0;
        end
      default: begin
        state_d = S_IDLE;
        cnt_d   = '0;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
    end else begin
      state_q <= state_d;
      cnt_q   <= cnt_d;
    end
  end

  // The write happens with the sense amplifier still enabled and the cell
  // selected: Data_in must not move during the pulse.
  a_wr_needs_rd : assert property (@(posedge clk) disable iff (!rst_n) wr |-> (rd && wl));

endmodule
