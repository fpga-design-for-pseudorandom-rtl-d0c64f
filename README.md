# CIPRNG(BBS, XORshift): a chaotic-iteration random number generator in SystemVerilog

This is register-transfer-level SystemVerilog for a pseudorandom number
generator that uses *chaotic iterations*. Three ordinary generators are
mixed:

* two 64-bit XORshift generators, which are fast but statistically weak;
* one Blum Blum Shub (BBS) generator, which is slow and has poor statistics,
  but whose low bits are believed to be cryptographically secure.

The generator keeps a 16-bit state. In every round it negates state bits,
one at a time. Which bit is negated at each step is chosen by the XORshift
outputs, and the BBS bits decide whether one extra negation is made. The
new 16-bit state is the output. The design follows "FPGA Design for
Pseudorandom Number Generator Based on Chaotic Iteration used in
Information Hiding Application" by J. M. Bahi, X. Fang, C. Guyeux and
L. Larger. That publication proves a useful security result: if the
source that drives the extra negations (here the BBS) is cryptographically
secure, the mixed generator is too. It also reports that the mixed output
passes the NIST SP 800-22 battery, although neither source passes it
alone.

The hardware gives one new 16-bit value per clock, after a two-clock fill.
A small wrapper packs two values into a 32-bit word for a processor bus.

## One round of the generator

With `x`, `y` the two XORshift outputs and `t` the BBS output, one round is:

```
z1 = x[31:0]   z2 = x[63:32]   z3 = y[31:0]   z4 = y[63:32]
for each j in 1..4:
    wj = 0
    for i in 0..11:                      # twelve 2-bit blocks
        wj ^= 1 << zj[2i+1:2i]
    if t[j-1]:                           # BBS bit j-1 is the switch
        wj ^= 1 << zj[25:24]             # block 13
z ^= w1 | w2 << 4 | w3 << 8 | w4 << 12
output z
```

In chaotic-iteration terms, the state is a vector of 16 Boolean cells and
the iteration function is Boolean negation. The *strategy* is the sequence
of cells to update. Each 2-bit block is one strategy entry, and it names
one of the four cells of its 4-bit group. Each round therefore performs 12
or 13 single-cell negations in each group, 48 to 52 in all. Only then is
the state sampled. The sampling is needed because the raw sequence changes
one bit per step and is far from random.

The round has 12 fixed blocks and a 13th switched by the BBS. The
security argument rests on this switch: which of the two cases occurred is
decided by a secure bit, so an observer who cannot predict the BBS cannot
predict the parity of the negations.

## How a 32-bit word becomes a 4-bit mask

`shift_xor_compute` is the heart of the design, and the step that is
easiest to misread. The order of the negations inside a round does not
matter, because negation commutes. Negating a bit twice leaves it
unchanged. So state bit `k` of a group ends up flipped exactly when the
number of blocks whose value is `k` is odd. The hardware needs no
sequential loop: it XORs twelve (or thirteen) one-hot 4-bit codes, which
gives that parity directly. Some examples:

| 32-bit word | switch | blocks applied | mask `w` |
|---|---|---|---|
| `0000_0000` | 0 | twelve 0s | `0000` (bit 0 flipped 12 times) |
| `0000_0000` | 1 | thirteen 0s | `0001` |
| `0200_0000` | 1 | twelve 0s, then a 2 | `0100` |
| `0000_0001` | 0 | one 1, eleven 0s | `0011` |

Blocks 14 to 16 (bits 31:26) of every half are never used.

## Hardware structure and timing

```
            +------------+   x (64)   +-- z1 -->[shift_xor_compute]-- w1 --+
 clk ------>| xorshift64 |------------+-- z2 -->[shift_xor_compute]-- w2 --+
            +------------+                                                 |
            +------------+   y (64)   +-- z3 -->[shift_xor_compute]-- w3 --+--> z ^= {w4,w3,w2,w1}
 clk ------>| xorshift64 |------------+-- z4 -->[shift_xor_compute]-- w4 --+        |
            +------------+                        ^  ^  ^  ^                       v
            +------------+   t[3:0]               |  |  |  |                  16-bit state z
 clk ------>|    bbs     |------------------------+--+--+--+  (switch bits)   (output, fed back)
            +------------+
   stage 1: the three generators          stage 2: masks and state update
```

* **xorshift64**: a 64-bit register with three XOR-with-shifted-self
  stages in its feedback path, `x ^= x<<13; x ^= x>>7; x ^= x<<17`. The
  shifts are constants, so they cost only wiring.
* **bbs**: register `b` (state) and register `m` (modulus, loaded at reset).
  Each clock, `b` is zero-extended to 64 bits, squared and reduced modulo
  `m`. The four least significant bits are the switch bits `t`.
* **ciprng_core**: the four `shift_xor_compute` units and the 16-bit state
  register.

A round takes two clocks. In the first, all three generators step in
parallel, and their results are the generators' own registers. In the
second, the masks are formed and XORed into the state. The stages overlap,
so the next round's generator step happens in the same clock:

```
clock edge      1         2         3         4    ...
generators    round 1   round 2   round 3   round 4
state z          -      value 1   value 2   value 3
z_valid          0         1         1         1
```

At f MHz the core gives 16·f Mbit/s. The published target of 400 MHz
would give 6.4 Gbit/s. The longest path is the BBS: a 32×32 multiply
followed by a 64-by-32-bit remainder, both in one clock. That is where to
pipeline if a higher clock is needed. Splitting it would change the
one-step-per-clock timing, and this design does not do so.

## The processor-facing wrapper: `bbs_xorshift_ci`

The published system attaches the generator to a soft processor through
three ports: `rst` and `ask` are driven by processor output ports, and the
processor reads `out[31:0]` through an input port. The wrapper has exactly
those ports:

| port | dir | width | behaviour in this RTL |
|---|---|---|---|
| `clk` | in | 1 | generator clock |
| `rst` | in | 1 | synchronous, active high; reloads every seed and clears `out` |
| `ask` | in | 1 | run enable: high = generate, low = every register holds |
| `out` | out | 32 | last packed word: earlier 16-bit value in `[31:16]`, later in `[15:0]` |

With `ask` held high, the first word appears 4 clocks after `ask` rises: 2
clocks fill the pipeline and 2 collect the two halves. After that, `out`
changes every 2 clocks. While `ask` is low, `out` is guaranteed stable, and
an assertion checks this. A slow reader can therefore drop `ask`, read, and
raise it again. No value is skipped or repeated across such a pause.

The source does not define the meaning of `ask`, the reset polarity or the
packing of two 16-bit values into 32 bits. They are choices made here.

## Constants that are not published

The publication gives the widths and the structure, but not these values.
All of them live in `rtl/ciprng_pkg.sv` and are parameters of
`ciprng_core` and `bbs_xorshift_ci`.

| constant | value | reason |
|---|---|---|
| XORshift shifts A, B, C | 13, 7, 17 | Marsaglia's full-period 64-bit triple |
| XORshift 1 seed | 88172645463325252 | Marsaglia's example seed |
| XORshift 2 seed | `64'h2545F4914F6CDD1D` | arbitrary non-zero |
| BBS modulus | 65519 × 65479 = 4290118601 (`32'hFFB603C9`) | both primes ≡ 3 mod 4, product fits 32 bits |
| BBS seed | 74565 | coprime to the modulus |
| initial state z | `16'hACE1` | arbitrary |

Rules for changing them:
* an XORshift seed must not be zero, because zero is a fixed point;
* the BBS modulus must be a product of two primes that are both 3 mod 4;
* the BBS seed must be coprime to the modulus and must not be 0 or 1.

A 32-bit modulus is far too small for real security. The publication
itself notes that a BBS this small fails the NIST tests on its own. The
security result is asymptotic.

## Where this RTL resolves or departs from the published description

* **XORshift shift directions.** The published algorithm uses
  `<<a, >>b, <<c`. The published block diagram labels the shifters
  `>>, <<, >>` and names the amounts s1, s2, s1. The RTL follows the
  algorithm, which is Marsaglia's form, and uses three independent amounts.
* **Shift amounts are parameters, not ports.** The publication calls the
  three shift amounts "inputs", but also says the shifts cost no logic.
  That is true only for constant shifts.
* **BBS output width.** The BBS text says the three low bits are taken,
  and a timing figure shows 3-bit BBS values. The algorithm and the block
  diagram use four switch bits. The RTL uses four.
* **Output word width.** The text gives a 16-bit output per round, while
  a timing figure shows 32-bit values on every clock. Elsewhere the
  processor bus is stated to be 32 bits. The core emits 16 bits per clock,
  and the wrapper packs two into 32 bits every second clock. The sample
  values in that figure cannot be reproduced, because seeds and shifts
  are not published.
* **Throughput arithmetic.** The conclusion mentions "132/16" per
  processing round. This design gives 16 output bits per clock, matching
  the 400 MHz × 16 bits figure.
* **Enable and valid.** The `en`/`ask` hold and the `z_valid` flag are
  additions of this design.

## What is not included

The published demonstrator also contains the following. None of it is
part of this RTL:
* a vendor PLL, which raises the 50 MHz board clock;
* a Nios II/f soft processor with 4 KB of on-chip memory;
* a controller for a 16 MB SDRAM;
* a host PC;
* the watermarking software that runs on the processor. It mixes a
  watermark by chaotic iterations and embeds it in chaotically chosen
  least significant bits of an image.

The processor side of the generator is represented only by the wrapper's
ports. The processor and the watermarking scheme are vendor or software
parts, and the publication does not describe them at the hardware level.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_xorshift64` | Marsaglia's three published outputs for seed 88172645463325252; 500 random-enable steps against a software model; hold; reload |
| `tb_bbs` | hand-computed sequence for m = 77, seed 3 (9, 4, 16, 25, 9); the modulus register ignoring later input changes; 1000 steps at the 32-bit modulus against a 64-bit model, including `t` |
| `tb_shift_xor_compute` | the directed cases in the table above; 3000 random words against a model that counts block occurrences and takes their parity |
| `tb_ciprng_core` | `z_valid` timing (exactly 2 enabled clocks); first four values against offline constants; about 3200 values with random enable against a sequential model of the algorithm; reset mid-stream |
| `tb_bbs_xorshift_ci` | end to end at the default parameters; see below |

The end-to-end test imitates a processor. It checks the 4-clock first
word and the 2-clock word rate, holds `ask` low, and resets mid-stream.
It then streams 2^20 bits (32768 words) with random `ask` pauses and
compares every word with a reference model. It counts how often each
mechanism occurred, and a mechanism that never occurs is a failure. It
also checks that each of the four BBS switches both applied and skipped
block 13. Last, it applies the NIST frequency (monobit) test to the
stream: 524339 ones in 1048576 bits, S_obs = 0.0996, well under the 2.576
rejection threshold. The other NIST tests were not run.

Every testbench was also run against a deliberately broken copy of its
module, and each one failed it. The broken copies had:
* a wrong shift direction;
* a 32-bit squaring that overflows;
* block 13 applied unconditionally;
* two mask groups swapped;
* the packing order reversed.

## Simulating

All files use plain IEEE 1800-2017 SystemVerilog. The package must be read
first:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/ciprng_pkg.sv tb/tb_bbs_xorshift_ci.sv --top-module tb_bbs_xorshift_ci
./obj_dir/Vtb_bbs_xorshift_ci
```

Replace the testbench name to run the others. The whole end-to-end test
finishes in well under a second. To use other seeds, override the
parameters of `bbs_xorshift_ci`. The reference models in the testbenches
hard-code the defaults, so change them too.

## Files

| file | content |
|---|---|
| `rtl/ciprng_pkg.sv` | widths, shift triple, modulus, default seeds |
| `rtl/xorshift64.sv` | 64-bit XORshift |
| `rtl/bbs.sv` | 32-bit Blum Blum Shub |
| `rtl/shift_xor_compute.sv` | 32-bit word plus switch to 4-bit negation mask |
| `rtl/ciprng_core.sv` | the two-stage generator, 16 bits per clock |
| `rtl/bbs_xorshift_ci.sv` | top: 32-bit packing and the `ask` run control |
| `tb/tb_*.sv` | one self-checking testbench per module |
