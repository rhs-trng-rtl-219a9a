# RHS-TRNG: an STT-MTJ true random number generator as a RISC-V execution unit

A magnetic tunnel junction (MTJ) switches between two resistance states. Under spin-transfer
torque (STT) it does so only with some probability, because thermal noise decides whether a
given current pulse flips it. RHS-TRNG turns that into random bits. Each generation period has
only two phases. The cell is read, and then the *inverse* of what was read is written back with
a current pulse tuned to switch it about half the time. No reset pulse is needed between bits,
so a bit takes one read plus one write: about 3.3 ns at circuit level. Two such generator units
are XORed into one cell to cancel drift in their switching probability. A row of cells that
share units delivers a whole word per period. Three custom instructions (`rand`, `frand.s`,
`frand.d`) let a processor fetch that word from an execution unit, which writes it back like
any other result.

This repository holds SystemVerilog for that design:

* behavioural models of the analog parts (the MTJ with its selector, and the sense amplifier);
* the write-driver logic;
* the unit, cell and parallel array structure;
* the phase sequencer;
* the instruction decoder and result formatter;
* the execution unit with its issue/write-back ports;
* a top level that a core's issue stage and write-back bus plug into.

The processor core itself, its caches and memory are not included. The top brings out the ports
where they would connect.

## 1. The two-phase generator unit

A unit (`rhs_single_unit`) is one 1T-1MTJ bit (`mtj_device`). It has a write driver
(`write_driver`) and a sense amplifier (`sense_amp`) on the same bit line (BL) and source line
(SL). The sense amplifier's inverted output `out_n` is wired straight back as the write driver's
`data_in`.

Logic values: the anti-parallel state (AP, high resistance) is 1 and the parallel state (P, low
resistance) is 0.

One period:

| phase        | WL | Rd | Wr | what happens |
|--------------|----|----|----|--------------|
| pre-charge   | 1  | 0  | 0  | both sense-amp outputs are pulled high |
| read         | 1  | 1  | 0  | the sense amp resolves the cell; `out` = state, `out_n` = its inverse |
| write        | 1  | 1  | 1  | the driver pushes current towards `out_n`; the sense amp keeps its result |

Rd stays high through the write. The sense amplifier therefore holds the value it read, and
`data_in` cannot follow the cell while it is written. Without this hold the loop would chase its
own output.

A cell read as 0 (P) is driven towards AP. It switches with probability P1. A cell read as 1
(AP) is driven towards P and switches with probability P2. The bit sequence of one unit is
therefore a two-state Markov chain. Its long-run probability of a 1 is

    P(1) = P1 / (P1 + P2)

which is 0.5 whenever P1 = P2, whatever their common value. A supply or temperature shift that
moves both probabilities together leaves the unit unbiased. Only an asymmetric shift biases it.
The chain is also correlated. If P1 = P2 = p, the next bit repeats the current one with
probability 1 − p. Only p = 0.5 gives independent bits. The supplies of the two driver stages are
meant to be set for that.

### Write driver

The driver has two push-pull stages, one on SL and one on BL. BL reaches the cell through a
pass transistor enabled by Wr.

| Wr | Data_in | BL | SL | current | writes |
|----|---------|----|----|---------|--------|
| 1  | 1       | 1  | 0  | BL → SL | 1 (AP) |
| 1  | 0       | 0  | 1  | SL → BL | 0 (P)  |
| 0  | x       | pass gate off | — | none | — |

The two write rows follow the description of which transistors conduct and of the reversed
current. The idle row, and the AND/inverter logic that gives all three, are this design's
completion.

### What the models do and do not capture

`mtj_device` and `sense_amp` stand for analog circuits and are not meant for synthesis, even
though both compile. Their limits:

* **Switching probabilities are inputs.** `p_p2ap` (P1) and `p_ap2p` (P2) are 17-bit fractions
  of 2^16 (`prob_t`; 65536 = 1.0). They stand for the operating point. The physics that maps
  supply voltage, pulse width, temperature and process to a probability is not modelled.
  Testbenches sweep these inputs instead.
* **Thermal noise is a pseudo-random generator.** Each MTJ instance runs its own 32-bit xorshift
  generator, seeded by the `SEED` parameter. It is stepped once per write pulse, and its low
  16 bits are compared with the probability. Seeds are spread across units by
  `rhs_pkg::seed_mix`. Any simulation is therefore repeatable. The hardware's randomness comes
  from the device, not from this generator.
* **Timing is cycle-level.** A switch takes effect when the write pulse ends. The sense
  amplifier resolves on the rising edge of Rd. Analog delays and the transistor-level read
  race are not represented.
* **Not modelled:** write endurance, read disturb, and the dependence of the switching
  probability on pulse width.

## 2. XOR cell and the shared-unit array

A cell (`rhs_cell`) XORs two units. If the units produce 1 with probabilities p0 and p1, the cell
produces

    P_xor(1) = p0 (1 − p1) + p1 (1 − p0)

so the bias from 0.5 becomes 2·(p0 − 0.5)·(p1 − 0.5). Two units that are each 0.1 off give a
cell only 0.02 off. Units whose errors have opposite signs overshoot only slightly in the other
direction.

The parallel array (`rhs_array`) builds N output bits from N+1 units. Bit *i* is unit *i* XOR
unit *i+1*, so adjacent cells share one unit:

    unit:  0   1   2   3  ...  N
            \ / \ / \ /         \ /
    bit:     0   1   2   ...   N-1

Bit 0 is a complete two-unit `rhs_cell`, and each further bit adds one unit and one XOR. All
units share WL, Rd and Wr, so the whole word is produced in one period. `N_BITS` defaults to 52
(53 units). That is the widest result any instruction needs.

Adjacent bits share a unit, so they are not independent: bit *i* XOR bit *i+1* equals
unit *i* XOR unit *i+2*. This is inherent to the sharing scheme, which trades unit count against
correlation between neighbouring bits. Each bit on its own still has the XOR-cell statistics.

## 3. Phase sequencing (`phase_ctrl`)

At circuit level the phases take less than 0.2 ns (pre-charge), less than 0.2 ns (read) and about
2.9 ns (write). That is 3.3 ns per bit, or 303 Mbit/s per cell.

Inside a 2 GHz processor the phases are relaxed to 0.5 ns + 0.5 ns + 3 ns. That is
1 + 1 + 6 clock cycles, so an instruction takes 8 cycles. The sequencer counts those cycles.
The defaults are `PRE_CYCLES = 1`, `RD_CYCLES = 1` and `WR_CYCLES = 6`.

    after clock edge   k      k+1    k+2 .. k+7   k+8
    state              PRE    READ   WRITE        IDLE (or PRE of the next op)
    wl rd wr           1 0 0  1 1 0  1 1 1        0 0 0
    flags                     sample last (k+7)
    result                    word captured at k+2, wb_valid high after k+8

A `start` accepted at edge *k* has the read word captured at edge *k+2* and the result written
back after edge *k+8*. `ready` is high when idle and in the last write cycle. Periods can
therefore run back to back, giving one instruction per 8 cycles. When idle, WL, Rd and Wr are
all low: the sense amplifiers stay pre-charged and no current flows.

An assertion checks that Wr is only ever high together with Rd and WL.

## 4. Instructions

The three instructions are R-type words. The encodings are as defined for this design:

| instr.  | 31:25   | 24:20 | 19:15 | 14:12 | 11:7 | 6:0     | result |
|---------|---------|-------|-------|-------|------|---------|--------|
| rand    | 0000001 | 00000 | 00000 | 000   | rd   | 1101111 | integer 0..32767 in x[rd] |
| frand.s | 0011000 | rs2   | rs1   | 000   | rd   | 1010011 | single in f[rd] |
| frand.d | 0011001 | rs2   | rs1   | 000   | rd   | 1010011 | double in f[rd] |

`rhs_decoder` matches every field shown. `rand` needs rs1 = rs2 = 0.

**Opcode conflict.** 1101111 is the major opcode of the base ISA's `JAL`. A word that decodes as
`rand` is also a legal `JAL` with a particular offset. The encoding is kept as defined. A core
that adopts it must give the TRNG decode priority, or move `rand` to a custom opcode (0001011,
for instance) by changing `OPC_RAND` in `rhs_pkg`.

**Result formats** (`fp_formatter`):

* **rand**: the low 15 bits of the array word, zero-extended.
* **frand.s**: sign 0, exponent 00000000, and a 23-bit fraction taken from bits 22..0 (units
  0..23). The upper 32 bits of the 64-bit FP register are set to ones. This NaN-boxing is what
  a D-extension core expects for a single, and is this design's choice.
* **frand.d**: sign 0, exponent 00000000000, and a 52-bit fraction from bits 51..0 (units
  0..52).

With a zero exponent these words are, strictly, IEEE subnormals: at most 2^-126 for a single and
2^-1022 for a double. The intended use is for software to read the fraction as a uniform value
in [0, 1): `fraction / 2^23` or `/ 2^52`, or set the exponent field to 127 or 1023 and subtract
1.0.

The frand instructions carry rs1 and rs2 so that the value could be scaled into the range given by
those two registers. How that scaling is done is not specified, so it is **not implemented**.
The unit returns the raw fraction. The decoded `rs1_idx`/`rs2_idx` are brought out at the top for
a core that wants to read the operands and add the scaling.

## 5. Execution unit and top level

`rhs_exec_unit` sits beside the ALUs, the FP unit and the load/store unit in the execute and
write-back stage.

* **Issue:** `issue_valid && issue_ready` accepts `{issue_op, issue_rd}` and starts a period.
* **Capture:** the array word is captured at `sample`, the end of the read phase. The write
  phase then re-randomises every MTJ for the next instruction, so a word is never reused.
* **Write-back:** when `last` is high, the formatted result is registered. `wb_valid` is high for
  one cycle with `wb_rd`, `wb_is_fp` and `wb_data` (64 bits).
* **Stall:** while a period runs, `issue_ready` is low until its last write cycle. A second TRNG
  instruction waits in the issue stage; this is a structural stall.

`rhs_trng_top` adds the decoder in front.

* `instr_is_trng` flags a TRNG word.
* `instr_ready` is low only for a TRNG word that has to wait. Ordinary instructions are never
  held by this unit.
* The probability inputs of all 53 MTJs are top-level ports. In a chip they are fixed by the
  supplies and the device. In simulation they set the operating point.

Assertions in the unit check three things: only legal ops are accepted, `wb_valid` is a
one-cycle pulse, and no write-back happens without a running period.

All sequential logic uses an asynchronous active-low reset `rst_n`. Lint reports it as used both
as a reset and in the assertions' `disable iff`. That is intended.

## 6. How far it can be trusted

Every module has a self-checking testbench with a watchdog. Each prints
`TB_RESULT checks=… failures=…` and compares against values worked out in the testbench, not
read back from the design.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_mtj_device` | write direction, no change without current, corner probabilities 0 and 1, switching rate over 4000 pulses |
| `tb_sense_amp` | pre-charge levels, read of both states, hold through a cell change |
| `tb_write_driver` | full truth table |
| `tb_rhs_single_unit` | alternation at P = 1, lock at P = 0, P(1) ≈ 0.5 at 0.5/0.5, P(1) ≈ 0.75 at P1 = 0.6 / P2 = 0.2 |
| `tb_rhs_cell` | output is the XOR of the units; biased units give the predicted 0.375 |
| `tb_rhs_array` | (8 bits) each bit is the XOR of its two neighbours, over many periods |
| `tb_phase_ctrl` | against a cycle model: phase lengths, sample/last, chained periods |
| `tb_rhs_decoder` | every instruction, plus single-field near misses |
| `tb_fp_formatter` | all three formats on random words |
| `tb_rhs_exec_unit` | (52 bits) results predicted from the MTJ states; 8-cycle latency; back-to-back issue; stall |
| `tb_rhs_trng_top` | end to end at default parameters (see below) |
| `tb_pvt_resilience` | bias of a unit and of a cell against the formulas above, at six operating points |
| `tb_nist_subset` | 1,000,000 bits of one cell in 10 sequences: the Frequency, BlockFrequency, CumulativeSums and Runs tests of NIST SP 800-22 |
| `tb_option_pricing` | Monte Carlo pricing of a European call from 1,000,000 `frand.d` results |

**End to end.** `tb_rhs_trng_top` runs the top with no parameter overrides. It mixes TRNG
instructions with ordinary ones and checks each result's format, destination and 8-cycle timing.
It counts each mechanism and fails if any of them never happened:

* all three instruction kinds;
* stalls;
* ordinary instructions passing while the unit is busy;
* back-to-back instructions;
* MTJ switches in both directions.

**Operating-point study.** `tb_pvt_resilience` runs 20,000 periods at each of six operating
points:

* nominal;
* both probabilities raised together;
* an asymmetric shift common to both units;
* two units with opposite errors.

It checks the measured P(1) of a unit and of the cell against the formulas to within 0.02. Where
a unit is biased, the cell's minimum entropy must be the higher. This shows the model follows the
analysis. It says nothing about real devices, whose probabilities come from the
voltage/temperature/process behaviour that the model takes as given.

**Application.** `tb_option_pricing` stands in for the host program. It turns each `frand.d`
fraction into a uniform variate, makes normals by Box-Muller, and prices a call with S0 = 100,
K = 105, T = 1, r = 5 %, σ = 20 %. After 100, 1,000, … up to 1,000,000 paths, the estimate must
fall within four standard errors of Black-Scholes. A typical run ends at 8.011 ± 0.013 against
8.021.

**Randomness tests.** `tb_nist_subset` computes five of the fifteen NIST SP 800-22 tests on
1,000,000 bits of one cell, split into 10 sequences of 100,000. A test passes when at least 9 of
the 10 sequences reach p ≥ 0.01, which is the suite's own proportion rule. All five pass 10/10.
The same bench fails all five when the units are biased (P1 = 0.3, P2 = 0.5). Because the noise
is modelled, this checks that the two-phase loop and the XOR carry randomness through without
bias or correlation. It says nothing about the device. The other ten tests (FFT, templates, rank,
linear complexity and so on) are not computed.

## 7. Simulating and changing it

Any testbench runs with plain Verilator 5 (two-state, timing enabled), for example:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
        rtl/rhs_pkg.sv tb/tb_rhs_trng_top.sv --top-module tb_rhs_trng_top
    ./obj_dir/Vtb_rhs_trng_top

`rhs_pkg.sv` holds everything that is shared:

* the instruction constants;
* the result widths;
* the default cycle counts;
* the op enum;
* the probability type;
* the seed mixer.

What to change for common variations:

* **Clock frequency:** another frequency needs other `PRE_CYCLES`/`RD_CYCLES`/`WR_CYCLES`. The
  latency follows automatically, and the testbenches compute their expected latency from the
  same constants.
* **Array width:** `N_BITS` on the top sets the width. A width below 52 still works, but the
  formatter fills the missing high fraction bits with zeros. The array alone accepts any width
  of 1 or more.
* **Repeatable runs:** each level takes a `SEED`. Different seeds give different but equally
  repeatable bit streams.

## 8. Departures from the described design

* **Range scaling of `frand.s`/`frand.d`** into [rs1, rs2] is not implemented (section 4).
* **`rand` keeps the `JAL` major opcode** as defined (section 4).
* **NaN-boxing of `frand.s`, the valid/ready issue handshake, back-to-back issue, capture at the
  end of the read phase, WL timing and idle levels, and the reset** are this design's own choices.
  The description does not fix them.
* **Time base.** The sense amplifier's development time and the write pulse are whole clock
  cycles (1 and 6 at 2 GHz), not the 0.2 ns and 2.9 ns of the circuit. This follows the relaxed
  system-level timing; it does not follow the 3.3 ns circuit period.
* **Models, not devices.** The MTJ and sense amplifier are behavioural models with pseudo-random
  noise (section 1). The voltage, temperature and process dependence is represented only through
  the probability inputs.
* **One shared 53-unit array** serves all three instructions. `frand.s` and `rand` use its low
  bits.
