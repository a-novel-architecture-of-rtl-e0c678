# Area-efficient radix-2 FFT with one reused butterfly column

An N-point radix-2 FFT has log2N stages of N/2 butterflies each. A fully
parallel ("array") implementation builds all (N/2)·log2N butterflies. This
design builds a single column of **N/2 butterflies** and runs it **log2N
times**, once per stage. The column's outputs go into a register array and
come back to its own inputs through a routing network whose wiring changes
with the stage. The multiplier and adder count therefore drops by a factor
of log2N. The price is that a frame takes log2N clock cycles instead of
flowing through log2N columns of logic.

The architecture is the one proposed in A. Mukherjee, A. Sinha and
D. Choudhury, *A Novel Architecture of Area Efficient FFT Algorithm for FPGA
Implementation*. Their implementation is an 8-point VHDL design for a
Virtex-6. This SystemVerilog is a fresh implementation of that
architecture, parameterised in N, with N = 8 as the default. Where the paper
is silent (number format, handshake, reset, register ordering), the choices
made here are listed in [What follows the paper and what does not](#what-follows-the-paper-and-what-does-not).

```
           x(0..N-1)
               │
        ┌──────▼──────┐ ISL   ┌──────────────┐
        │ source_     │◄──────┤              │
   ┌───►│ selector    │       │ control_unit │── SB (stage bus) ──┐
   │    └──────┬──────┘       │ (stage count)│                    │
   │    ┌──────▼──────┐  SB   └──────┬───────┘                    │
   │    │ routing_    │◄────────────────────────────────┐         │
   │    │ network     │                      OSL│       │         │
   │    └──┬───────┬──┘                         │  ┌────┴────────┐│
   │      a│      b│   ┌───────────────┐        │  │ twiddle_rom ││
   │    ┌──▼───────▼──┐│ W_N^k per BF  │◄───────┼──┤ log2N x N/2 │◄┘
   │    │ N/2 x       │◄┘              │        │  └─────────────┘
   │    │ butterfly   │                │        │
   │    │ unit        │ (top = a+Wb, bot = a-Wb)│
   │    └──────┬──────┘                         │
   │    ┌──────▼──────┐◄────────────────────────┘
   │    │ output_     │──────────► y = Y(0..N-1), y_valid
   │    │ selector    │
   │    └──────┬──────┘
   │    ┌──────▼──────┐
   └────┤ register_   │
        │ array (N)   │
        └─────────────┘
```

## One frame, stage by stage

The control unit holds a stage counter, the **stage bus** SB, which goes
0, 1, …, log2N−1 at one step per clock cycle. Two select lines are derived
from it:

| stage SB | ISL (input select) | butterflies read | OSL (output select) | butterflies write |
|---|---|---|---|---|
| 0 | 0 | external samples x(n), bit-reversed | 0 | register array |
| 1 … log2N−2 | 1 | register array | 0 | register array |
| log2N−1 | 1 | register array | 1 | output port y |

For N = 8 that is three cycles: SB = 00, 01, 10.

The arithmetic is the textbook in-place decimation-in-time (DIT) FFT.
Number the N slots of the in-place array p = 0 … N−1. In stage s,
butterfly j combines positions

    top(j,s) = (j >> s) · 2^(s+1) + (j mod 2^s)     and     top(j,s) + 2^s

using the twiddle W_N^k = e^(−j2πk/N), where k = (j mod 2^s) · 2^(log2N−1−s).
So the "distance" between the paired samples is 1, 2, 4, … in successive
stages. For N = 8:

| stage | BF0 | BF1 | BF2 | BF3 | twiddles (BF0..3) |
|---|---|---|---|---|---|
| 0 | x0, x4 | x2, x6 | x1, x5 | x3, x7 | W^0 W^0 W^0 W^0 |
| 1 | f0, f2 | f1, f3 | f4, f6 | f5, f7 | W^0 W^2 W^0 W^2 |
| 2 | f0, f4 | f1, f5 | f2, f6 | f3, f7 | W^0 W^1 W^2 W^3 |

Here f(p) is in-place position p after the previous stage. Stage 0's pairs
are the bit-reversed input order. After the last stage, position p holds
DFT bin p. Butterfly j therefore ends with bins j (sum output) and
j + N/2 (difference output).

## Register array ordering: where the shuffle happens

This is the least obvious part of the design. The butterflies always write
to the register array in **butterfly order**: the sum output of butterfly j
goes to slot 2j and its difference output to slot 2j+1, in every stage. The
register array is therefore N plain registers with fixed wiring and no
address logic. The slot that holds in-place position p after stage s is

    slot(p, s) = 2 · ( (p >> (s+1)) · 2^s + (p mod 2^s) ) + bit s of p

All the reordering is done in `routing_network`. For each stage s ≥ 1 it
sends slot(top(j,s), s−1) to input a of butterfly j and
slot(top(j,s) + 2^s, s−1) to input b. In stage 0 the same inputs are the
external samples x(rev(2j)) and x(rev(2j+1)), where rev is bit reversal.
Each stage is a fixed wiring, so the network is log2N permutations of N
wires plus one N-wide multiplexer controlled by SB. The helper functions
`bitrev`, `top_pos`, `slot_of_pos` and `twiddle_exp` in `fft_pkg` hold these
formulas, and the routing network and twiddle ROM evaluate them at
elaboration.

Because the final-stage butterfly j produces bins j and j+N/2,
`output_selector` routes the sum output of butterfly j to y[j] and the
difference output to y[j+N/2]. The output port then carries Y(0 … N−1) in
natural order, with no reordering buffer.

## The butterfly across one clock cycle

`butterfly_unit` computes top = A + W·B and bot = A − W·B. Following the
paper, one butterfly operation fits in one clock cycle, split across its two
phases:

```
clk        ____/‾‾‾‾‾‾‾‾‾\_________/‾‾‾‾
SB, regs   ====X== stage s ============X==
W·B        ----[ multiply: high phase ]
top/bot    ===============X A ± W·B   ====X   (captured on the falling edge)
reg array  ====X== results of stage s-1 ===X== results of stage s
```

The inputs change just after the rising edge, when the counter and the
register array update. The complex multiply (four real multipliers) is
combinational and settles during the high phase. The sum and difference are
captured in a register on the **falling edge**. The register array takes
them on the next rising edge. The path is therefore: half a cycle of
multiply, then half a cycle of routing through the output selector. At the
top level the critical path is register array → source selector → routing
multiplexer → multiplier, and it must fit in the high phase. A duty cycle
other than 50 % shifts the split.

## Interface and timing of `area_efficient_fft`

| port | dir | width | meaning |
|---|---|---|---|
| clk | in | 1 | clock; both edges are used (see above) |
| rst_n | in | 1 | synchronous, active-low; clears the stage counter and register array |
| start | in | 1 | offer a frame; accepted on the rising edge that ends a cycle with ready = 1 |
| x | in | N × cplx_t | input samples x(0 … N−1); cplx_t = {re, im}, 18-bit signed each |
| ready | out | 1 | stage 0, a frame can be taken |
| y | out | N × cplx_t | Y(0 … N−1), natural order, zero except when y_valid |
| y_valid | out | 1 | last stage (OSL); y holds the result |

- Drive x with start while ready is 1. Keep x stable through that cycle's
  falling edge.
- log2N−1 cycles later y_valid is 1 for exactly one cycle. y is stable from
  that cycle's falling edge until its closing rising edge, so sample it on
  that rising edge.
- ready is 1 again in the cycle after y_valid. Frames can therefore be
  offered back to back, one every log2N cycles. For N = 8 that is 3 cycles.
- The transform is unnormalised: Y(k) = Σ x(n)·W_N^(nk), up to rounding.

## Number format and dynamic range

- Samples are 18-bit signed integers per component (`fft_pkg::DATA_W`).
- Twiddles are 18-bit signed with 16 fraction bits (`TW_W`, `TW_FRAC`), so
  1.0 = 65536. Each twiddle is rounded to nearest.
- Each product W·B is rounded half up to an integer: +2^15, then an
  arithmetic shift right by 16. Sums and differences wrap at 18 bits.
- There is no per-stage scaling. A component can grow by up to a factor of
  about 2 per stage. To avoid wrap-around, keep |x| ≤ 2^16 / (2N) per
  component: 4096 at N = 8, 32 at N = 1024. The rounding error is a few LSBs
  (at most about 2·log2N).

The widths are package constants, not module parameters. Change them in
`fft_pkg`. The testbench reference model in `tb/fft_ref_pkg.sv` has its own
copies (`W`, `FRAC`).

## Resources

For the default N = 8, a generic synthesis of this RTL gives:

- 16 real multipliers: 4 per butterfly, forming one complex multiplier
  each (8 two-product multiply-accumulate cells);
- 16 adders/subtracters of 18 bits;
- the register array: 8 × 36 = 288 flip-flops;
- the falling-edge butterfly output registers: another 288 flip-flops;
- a 2-bit stage counter.

The paper's 8-point synthesis reports 16 DSP slices, 288 registers and 301
slice registers. Its butterflies apparently do not hold their results in a
separate register of their own. Here they do, to give the falling-edge
capture the paper describes a definite storage element, so this design has
about twice the paper's flip-flop count. The multiplier count grows as
N/2 · 4, and the routing multiplexer grows as N · log2N inputs.

## What follows the paper and what does not

Follows the paper:

- the block structure: input multiplexers on ISL, routing network, N/2
  butterflies, twiddle ROM, output demultiplexers on OSL, register array,
  control unit;
- the control sequence: one stage per rising edge; ISL = 0 only in the
  first stage; OSL = 1 only in the last;
- a twiddle ROM of log2N × N/2 entries, addressed by the stage bus, with one
  output per butterfly;
- bit-reversed input order in stage 0 and pairing distance 2^s afterwards,
  with exactly the 8-point pairs the paper draws;
- the butterfly A ± W·B, multiply in the high phase and add/subtract on the
  falling edge;
- 18-bit data, inferred from the paper's count of 288 register bits for
  8 complex samples.

This design's own choices:

- the number format, rounding, wrap-around and absence of scaling;
- the start/ready/y_valid handshake and the idle state at stage 0 (the
  paper's counter only has a clock);
- the synchronous reset;
- the butterfly-order register array and the slot formula;
- zero on the unselected side of each output demultiplexer;
- the combinational ROM and multiplier.

Known departures:

- **Output labels.** The paper's drawings label the two outputs of
  butterfly j as Y(2j) and Y(2j+1). With the pairing it draws, those wires
  carry bins j and j+N/2. This design follows the paper's definition of Y(k)
  as DFT bin k and wires the outputs accordingly.
- **Flip-flops.** The flip-flop count is roughly double the paper's (see
  Resources).
- **Timing.** No FPGA timing closure has been attempted. The paper reports
  51 MHz on a Virtex-6 for its 8-point design.

## Files

| file | contents |
|---|---|
| `rtl/fft_pkg.sv` | widths, `cplx_t`/`twid_t`, in-place index functions |
| `rtl/control_unit.sv` | stage counter, SB/ISL/OSL/ready |
| `rtl/source_selector.sv` | N input multiplexers (ISL) |
| `rtl/routing_network.sv` | per-stage permutation selected by SB |
| `rtl/twiddle_rom.sv` | log2N × N/2 twiddle ROM, computed at elaboration |
| `rtl/butterfly_unit.sv` | complex multiply + falling-edge add/subtract |
| `rtl/output_selector.sv` | N output demultiplexers (OSL), natural-order Y |
| `rtl/register_array.sv` | N complex feedback registers |
| `rtl/area_efficient_fft.sv` | top level, parameter N (default 8) |
| `tb/fft_ref_pkg.sv` | bit-exact reference FFT and exact DFT |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/fft_size_check.sv`, `tb/tb_fft_sizes.sv` | the processor at N = 16 … 1024 |

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/fft_pkg.sv tb/fft_ref_pkg.sv rtl/*.sv tb/tb_area_efficient_fft.sv \
  --top-module tb_area_efficient_fft -Mdir obj && obj/Vtb_area_efficient_fft
```

Replace the testbench name to run any other one. `tb_fft_sizes` also needs
`tb/fft_size_check.sv`, and its build takes a few minutes because of the
1024-point instance. Every testbench ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog that counts a
failure if the test hangs.

What the testbenches establish:

- **`tb_area_efficient_fft`** runs the default 8-point design on 200 frames:
  an impulse, a constant and random data, back to back and with idle gaps.
  - Each result matches a separately written fixed-point DIT FFT bit for
    bit.
  - Each result is within 2·log2N+2 LSBs of the exact DFT.
  - Each result arrives exactly log2N−1 cycles after acceptance, and y is
    zero outside y_valid.
  - ready matches the frames in flight.
  - It counts the external-input stages, feedback stages, output stages,
    back-to-back frames and idle cycles, and fails if any of them never
    happened.
- **`tb_fft_sizes`** repeats the bit-exact and timing checks at N = 16, 32,
  64, 128, 256, 512 and 1024.
- **The unit testbenches** check:
  - the routing network against the paper's 8-point pairs and against an
    independent position model at N = 16 and 64;
  - the twiddle ROM against computed values at N = 8, 32 and 1024;
  - the butterfly's arithmetic, and that its outputs do not change before
    the falling edge;
  - the control sequence and frame length at N = 8 and 32.
