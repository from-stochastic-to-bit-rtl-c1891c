# Bit-stream arithmetic: exact and near-exact adders and multipliers on unary streams

In stochastic computing a number in [0, 1] is carried by a serial bit stream.
Its value is the fraction of 1s in the stream. A single AND gate multiplies two
such streams, and a multiplexer adds them. The price is accuracy. The gates
only give the right answer if the 1s of the two operands happen to overlap in
the right proportion. With random streams, that needs very long streams.

Bit-stream computing keeps the stream representation and the small hardware,
but gives up randomness. Each circuit here arranges its operands so that the
result depends only on **how many** 1s each input stream holds, never on where
they are. For a stream of length `n`, a value is an integer count `0..n`, and
any ordering of that many 1s is equally valid. Because outputs are streams of
the same kind, units can be chained (multi-level operation) without
converting back to binary in between.

This repository holds synthesizable SystemVerilog for six such circuits. They
fall into two families:

* **Increasing stream length (fully accurate).** `n`-bit inputs give a `2n`-bit
  sum or an `n²`-bit product. That is exactly enough slots to hold every
  possible result, so the result is always exact.
* **Constant stream length (semi-accurate).** `n`-bit inputs give an `n`-bit
  result, rounded to the nearest `1/n`. A new operand pair can follow the
  previous one without a gap.

The repository also has a perceptron that uses the constant-length circuits,
and a top level that places everything on one clock.

## The units at a glance

| unit | module | output length | accuracy | throughput | latency |
|---|---|---|---|---|---|
| delay-line adder (AISA) | `aisa` | 2n | exact | one sum per 2n cycles | combinational from the inputs |
| delay-line multiplier (AISM) | `aism` | n² | exact | one product per n² cycles | combinational from the inputs |
| counter/multiplexer adder (SISA) | `sisa` | 2n | exact | one sum per 2n cycles | Input-1 is replayed in the next 2n frame |
| counter/multiplexer multiplier (SISM) | `sism` | n² | exact | one product per n² cycles | one n² frame |
| constant-length adder, 2 inputs (SCSA) | `scsa` | n | ±0.5/n | back to back | combinational |
| constant-length adder, i inputs | `scsa_multi` | n | ±0.5/n | back to back | combinational |
| constant-length multiplier (SCSM) | `scsm` | n | ±0.5/n | back to back | first output bit 2 cycles after the last input bit |
| perceptron | `nn_neuron` | binary | see below | one result per n cycles | two frames |

In the names, A/S means asynchronous/synchronous, I/C increasing/constant
stream length, and A/M adder/multiplier. "Adder" means a scaled adder: the
output value is the average of the input values, `(X1+X2)/2`. That is the
only sum that stays in [0, 1].

All modules take one stream bit per rising clock edge. Reset `rst_n` is
synchronous and active low. The default stream length is `n = 8` (parameter
`N`, a power of two). The counters are `log2 n + 1` bits wide, so they can
hold the full-scale count `n`.

## Exact addition by making room: AISA and SISA

Two `n`-bit streams can hold up to `2n` ones between them. The adders give the
result `2n` slots and put the two operands in separate halves.

**AISA** delays Input-2 by `n` bit durations and ORs it with Input-1. Input-1
fills slots `0..n-1` of the output and Input-2 fills slots `n..2n-1`, so no 1
can hide another. The original circuit is asynchronous. Its delay is a chain
of inverters tuned by supply voltage. Here the delay is a shift register
clocked once per bit duration (`delay_line`). That is the same delay measured
in bits, but it has no analog delay tuning.

**SISA** makes the same room with a counter instead of a long delay, so the
area grows with `log n` rather than `n`:

1. A counter counts the 1s of Input-1 during one `2n`-cycle frame.
2. At the frame end, the count moves to a register.
3. In the next frame, a multiplexer turns the register back into a stream
   (`stream_regen`), driven by the stages of a frequency divider
   (`freq_divider`).
4. The multiplexer has `log2 n + 2` inputs, and the last one is tied to 0.
   During the second half of the frame it outputs 0, and Input-2 passes through
   the final OR gate.

The reconversion is the subtle part. A count `R = R_K..R_0` (`n = 2^K`) must
come out as `R` ones in `n` slots:

* Register bit `R_j` (`j < K`) has weight `2^j`, so it gets `2^j` slots.
* That uses `n - 1` slots. The one slot left over goes to `R_K` alone.
* `R_K` is set only for the full-scale count `n`, and then every other bit is
  0. So `R_K` is also ORed into every other multiplexer input, which lights
  all `n` slots.

The slot order of the adder (divider state `S`, `n = 8`):

| S | 0 | 1 | 2–3 | 4–7 | 8–15 |
|---|---|---|---|---|---|
| multiplexer output | R0 or R3 | R3 | R1 or R3 | R2 or R3 | 0 (Input-2 half) |

The inputs must follow a fixed schedule:

* Input-1 of operation `f` arrives in any `n` slots of frame `f`.
* Input-2 of the same operation arrives in slots `n..2n-1` of frame `f+1`.
* `frame_start` marks slot 0.

## Exact multiplication: AISM and SISM

Every 1 of Input-1 has to meet every 1 of Input-2 in an AND gate, each pair
in its own slot. That makes `n²` slots.

**SISM** counts both inputs and then replays them in a different way:

* A fast multiplexer, selected by divider bits `S_0..S_{K-1}`, replays
  Input-1's count as an `n`-bit stream repeated `n` times.
* A slow multiplexer, selected by `S_K..S_{2K-1}`, holds each bit of Input-2's
  replayed stream for `n` cycles.

The AND of the two has exactly `X1·n · X2·n` ones. Here the reconversion
swaps the first two slots, so the `R_K`-only slot comes first. A count of 3 of
4 replays as `0,1,1,1`.

**AISM** does the same with delays only. There are `2n-1` AND gates. Gate `g`
sees Input-1 delayed by `d1(g)` and Input-2 delayed by `d2(g)`:

* Gate 1 pairs bit `k` with bit `k`.
* Gates `2..n` pair later bits of Input-1 with earlier bits of Input-2.
* Gates `n+1..2n-1` do the opposite.

The delays are chosen so that all `n²` pairs land in distinct slots. An OR
gate then merges the gates. Per gate, the delay steps are:

```
Input-1:  0 (g=1),  n-(g-1) (g=2..n),  n (g=n+1),       g-(n+1) (g>n+1)
Input-2:  0 (g=1),  n-(g-2) (g=2..n),  -(n-2) (g=n+1),  g-n (g>n+1)
```

The cumulative sums of these steps are the taps (`bsc_pkg::aism_delay1/2`). For
`n = 3` the (Input-1, Input-2) delays are (0,0), (2,3), (3,5), (6,4), (7,6).
Each input's delays are taps of one shift register, `n² - n + 1` stages long.
That is fine at `n = 8`. The size grows as `n²`, so the delay-line units are
impractical for long streams.

## Constant stream length: rounding with a carry

**SCSA (two inputs).** The two streams are averaged bit by bit. If both bits
are equal, the output is that bit. If they differ, the output owes half a 1.
A one-bit carry remembers that:

* The first such bit outputs the stored carry, and the carry flips.
* The next such bit pays the debt.

In gates: `out = majority(in1, in2, carry)` and
`carry' = in1 ^ in2 ^ carry`. The result is exact when `X1 + X2` is even.
Otherwise it is off by half a bit. The carry starts at 0 after reset, so the
first odd sum rounds down. The carry is never cleared between streams.

**scsa_multi (i inputs, default 4).** A parallel counter counts the 1s among
the `i` input bits each cycle and adds the carry register. When the sum
reaches `i`, the output is 1 and `i` is subtracted. The carry starts at `i/2`,
which rounds to the nearest value.

**SCSM.** A product cannot be formed bit by bit, so the multiplier first counts
both operands (`a`, `b`). In the next frame it regenerates two new streams
whose AND is the rounded product (`scsm_regen`):

* `REG_IN1` is `a` ones followed by zeros. A counter is loaded with `~a` and
  counts up. `REG_IN1` is 1 while the counter lies between `01..1` and
  `11..10`, which lasts exactly `a` cycles. This is the same range decode as
  the published gate-level circuit.
* `REG_IN2` spreads `b` evenly by error diffusion. A carry register starts at
  `n/2`. Each cycle a no-carry adder forms `carry + b`. Its MSB is `REG_IN2`.
  The other bits, with the MSB forced to 0 (which subtracts `n`), become the
  next carry. The carry bit of the adder and the MSB of the carry register are
  therefore always 0. The carry port keeps the full width anyway.

Because `REG_IN2` is evenly spread, its first `a` slots hold
`round(a·b/n)` ones, with halves rounded up. Both regenerated streams pass
through one flip-flop before the AND gate. The product of operands in slots
`0..n-1` of frame `f` therefore starts two cycles after the last input bit,
and frames can follow each other without gaps.

Without its input counters, `scsm_regen` is a binary-to-stream multiplier. It
takes binary `a` and `b` and produces their product as a stream. The
perceptron uses it that way.

## The perceptron (`nn_neuron`)

`nn_neuron` computes `y = ReLU(Σ x_i·w_i)` for `NUM_IN = 16` inputs in the
constant-length style:

* Binary inputs `x_i` (`0..n`) and signed binary weights `w_i` (`-n..n`) drive
  one `scsm_regen` each. Their outputs go through flip-flops and an AND gate
  to form the product stream.
* The products are summed in pairs by a binary tree of two-input SCSA adders.
* The sum stream goes to a counter, and ReLU is applied in binary.

How negative weights are handled is this design's own choice. Products with
negative weights go to a second adder tree. Both trees are counted, and ReLU
acts on the difference of the two counts. `NUM_IN` is padded with zero
streams to the next power of two, `P`. Each tree output therefore carries its
sum divided by `P`, and `y/n ≈ max(0, Σ (x_i/n)(w_i/n)) / P`.

Timing: operands are sampled at each frame end, and `y` appears with a
one-cycle `y_valid` two frames later. There is one result every `n` cycles.

The rounding error builds up with depth: one multiplier, then `log2 P` adder
levels. The testbench checks `y` against an exact bit-level model and also
checks that it stays within ±3 counts of the exact real-valued result. At
8-level inputs this error is large compared with `y`. Use a larger `N` if
accuracy matters.

## Top level (`bsc_top`)

`bsc_top` instantiates every unit side by side on one clock and reset, each
with its own ports:

* AISA, AISM, SISA and SISM.
* The two-input SCSA and the four-input `scsa_multi`.
* SCSM and the 16-input perceptron.

Every frame counter starts in the first cycle after reset, and each unit has a
`*_frame_start` output. A unit's output stream can be wired to another unit's
input. The end-to-end test does this by feeding the SCSM output into the SCSA.

Parameters: `N = 8` (stream length), `NUM_IN = 4` (inputs of the multi-input
adder), and `NN_IN = 16` (perceptron inputs).

## Where this RTL departs from the published circuits

* **Delays are clocked.** The asynchronous units use shift registers clocked
  once per bit instead of analog inverter chains. Their analog behaviour is
  not modelled: delay tuning by supply voltage, pulse-width distortion, glitches
  and PVT sensitivity.
* **Register triggers.** A single synchronous `frame_end` enable (divider all
  ones) replaces register triggers taken from divider edges. In SISM, both
  registers load at the end of each `n²` frame from a `2·log2 n`-stage
  divider. The published circuit uses separate triggers and one extra divider
  stage, but does not give their timing against the counting windows.
  Counters clear at the same edge as the registers load.
* **SCSA carry clock.** The published SCSA clocks its carry on the inverted
  clock. Here it uses the rising edge, so each output bit uses the carry left
  by the previous bit. The carry starts at 0, as in the worked example. A
  sentence elsewhere suggests `i/2` (= 1) for two inputs. `scsa_multi` follows
  the `i/2` rule.
* **scsa_multi comparison.** The text says the output becomes 1 when the carry
  is "larger than" `i`. The published four-input circuit is a modulo-`i` adder
  whose carry-out is the output, which means `>= i`. This RTL uses `>= i`.
* **SCSM Input-1 transfer.** In SCSM, the second counter is loaded
  synchronously with the inverted count, in place of the original register and
  asynchronous clear/preset transfer. It starts from the same value.
* **Perceptron.** The sign split, zero padding and pipeline are this design's
  own. Only one neuron exists. A full network needs weight storage, one
  neuron per perceptron or time-sharing, and layer sequencing, and none of
  these is included.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
prints `TB_RESULT checks=… failures=…` and has a watchdog. The testbenches
compare against models written independently from the arithmetic:

* Exact counts and slot positions for the increasing-length units. This
  includes the published 3-bit AISM pairing and the 4-bit SISM and AISA
  examples, plus directed and random operands at `n = 8`.
* The transition table and worked examples for SCSA.
* The regeneration algorithm and worked examples for SCSM.
* All `(a, b)` pairs for `scsm_regen`.
* A bit-exact model plus an accuracy bound for the perceptron.

`tb_bsc_top` runs every unit at its default size for 40 `n²` frames. It checks
every output bit and counts the mechanisms each unit relies on:

* The SISA grounded-multiplexer half.
* Full-scale operands (the `R_K` path).
* SCSA carry storage and rounding, and SCSA4 carry-outs.
* SCSM carry subtraction, rounding, back-to-back frames and multi-level
  operation.
* ReLU clipping and passing.

The test fails if any of these never happens.

To simulate with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    -Irtl -y rtl rtl/bsc_pkg.sv tb/tb_bsc_top.sv --top-module tb_bsc_top
./obj_dir/Vtb_bsc_top
```

Swap in any other testbench name to test a single unit. The testbenches set a
few parameters themselves, such as `n = 4` for the published examples. Every
synchronous unit accepts any power-of-two `N`. The delay-line units grow as
`N²`.
