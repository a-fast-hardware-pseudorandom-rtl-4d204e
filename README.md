# xoroshiro128aox: a 64-bit-per-cycle hardware random number generator

A processor that rounds floating-point numbers stochastically, or that offers
random-number instructions, needs a fresh random word almost every cycle. It
also needs one generator per core, so the generator must be small. Linear
generators of the xorshift family are ideal in hardware: their state update is
a few XORs, and shifts and rotates by constants are only wiring. Their weakness
is that the raw state is linear over GF(2). Statistical tests for linearity,
such as binary matrix rank and linear complexity, catch it. The usual remedy,
adding the two state words (`xoroshiro128+`), needs a 64-bit carry chain, and
it still leaves the low output bits almost linear.

This design keeps the `xoroshiro128` state machine and replaces the adder with
**AOX**, a carry-free AND-OR-XOR scrambler. Each output bit depends on six state
bits at fixed nearby positions. The whole step is a few gate levels deep, so
one 64-bit random word comes out every clock cycle from 128 flip-flops and
about four 64-bit logic layers.

## The algorithm

The state is two 64-bit words, `s0` and `s1`. One step produces an output word
`r` from the current state, then replaces the state:

```
sx  = s0 ^ s1
sa  = s0 & s1
r   = sx ^ (rotl(sa, 1) | rotl(sa, 2))          // AOX output
s0' = rotl(s0, A) ^ sx ^ (sx << B)               // xoroshiro128 update
s1' = rotl(sx, C)
```

Bit by bit, the output is

```
r[i] = s0[i] ^ s1[i] ^ ( (s0[i-1] & s1[i-1]) | (s0[i-2] & s1[i-2]) )   (indices mod 64)
```

The constants default to `A, B, C = 55, 14, 36`, the 2016 `xoroshiro128`
constants, which the silicon version of this generator uses. The later
recommended set `24, 16, 37` can be chosen by parameter. Both sets give
statistically equivalent output.

### Why AOX and not addition

With `r = s0 + s1`, bit 0 is just `s0[0] ^ s1[0]`, and bit *i* depends only on
the bits below it. The low bits therefore stay close to linear. Tests catch
this when those bits are moved to the top of a word. AOX gives every bit the
same neighbourhood, to the left and to the right. The AND terms make the output
non-linear in every position. The price is that AOX, unlike addition, is not
exactly uniform: some 64-bit outputs are slightly more likely than others. The
bias is too small to measure at full width. At reduced widths it can be
enumerated exactly (see *Verification* below), and there it stays well under
the chi-square significance threshold.

### Properties that follow from the structure

* **Period.** The update is an invertible linear map with period 2^128 - 1 over
  the non-zero states. The all-zero state maps to itself. A zero seed therefore
  stops the generator, and the RTL asserts against loading one.
* **Zero land.** From a seed with very few set bits, the output stays sparse
  for a few steps. Within about ten steps about half of the output bits are set.
* **Cost.** The state update is three 64-bit XOR layers. AOX is one AND, one OR
  and two XOR layers per bit. There is no carry chain, so both fit easily in one
  cycle, and AOX costs about a third as much as a 64-bit adder.

## Hardware structure

```
             seed_i ──┐
                      ▼
          ┌──────► state_q {s1,s0} (128 flops) ──┬──► aox_output ──► rand_o[63:0]
          │               ▲                       │
          │               │ advance_i / seed_load_i
          │               │                       ▼
          └───────── xoro_state_update ◄──────────┘
```

| File | Contents |
|---|---|
| `rtl/xoro_pkg.sv` | state type `xoro_state_t` (`s1` in bits 127:64, `s0` in 63:0), word type, both constant sets |
| `rtl/xoro_state_update.sv` | combinational next-state function, parameters `ROT_A`, `SHIFT_B`, `ROT_C` |
| `rtl/aox_output.sv` | combinational AOX scrambler, parameter `W` (64 in the generator) |
| `rtl/xoroshiro128aox.sv` | top: state registers, seeding, advance control |

### Interface and timing of `xoroshiro128aox`

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk_i` | in | 1 | clock |
| `rst_ni` | in | 1 | asynchronous active-low reset; loads `RESET_SEED` |
| `seed_load_i` | in | 1 | at the rising edge, load `seed_i` as the state (wins over `advance_i`) |
| `seed_i` | in | 128 | new state `{s1, s0}`; must not be zero |
| `advance_i` | in | 1 | at the rising edge, the word on `rand_o` counts as consumed and the state steps |
| `rand_o` | out | 64 | AOX output of the current state; valid in every cycle |

* `rand_o` is combinational from the state flops. The word present in the cycle
  where `advance_i` is high is the word delivered by that step. This matches
  the software definition, which computes the output from the state before
  updating it.
* With `advance_i` held high, a new word appears every cycle.
* With `advance_i` low, the state and `rand_o` hold, so a consumer that reads
  irregularly never skips words.
* After `seed_load_i`, the first word of the new sequence is on `rand_o` in the
  next cycle.
* The reset seed `s0 = 1, s1 = all ones` gives the output sequence
  `fffffffffffffff8, fc7fffeffffe7ffd, ff7c406f97ffbe3e, 8f02643ff763811f,
  7203cb958f34d19e, ...`.

Parameters: `ROT_A`, `SHIFT_B`, `ROT_C` (default 55/14/36) and `RESET_SEED`.

## What follows the published generator and what is this design's own

These follow the published generator:

* The state update.
* The AOX function.
* Both constant sets and the 55/14/36 default.
* The 64-bit output width.
* A complete step in one cycle, with the state held in registers.

The published description defines the generator as an algorithm. It does not
say how the generator is connected inside a processor. These choices are
therefore this design's own:

* the seed-load port and its priority over advance;
* the `advance_i` hold behaviour;
* the asynchronous reset and its seed value (the seed also used for the
  long Hamming-weight test of the generator);
* the zero-seed assertion;
* the `W` parameter of `aox_output`, which only serves the small-width
  uniformity study.

Left out:

* The jump function, which moves a state 2^64 steps ahead to give parallel
  generators disjoint sequences. In this design it is part of seed
  preparation, outside the hardware.
* The consumers of the random words: stochastic rounding, and uniform or
  Gaussian random-value instructions.
* Any arrangement of several generator contexts per processor core.

## Verification

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`.

| Testbench | What it shows | Run time |
|---|---|---|
| `tb_aox_output` | 64-bit AOX against a bit-by-bit model of the equation (directed, wrap-around, sparse and random words); 8-bit AOX exhaustively | < 1 s |
| `tb_xoro_state_update` | known answers from an independent model; random states for both constant sets; GF(2)-linearity `f(a^b) = f(a)^f(b)`; the zero fixed point | < 1 s |
| `tb_xoroshiro128aox` | full generator at default parameters: reset known answers, 1000 words in 1000 cycles, 20 000 cycles of random seed loads, advances and stalls, mid-stream reset; counts each mechanism | < 1 s |
| `tb_zero_escape` | each of the 128 one-hot seeds run for 1 000 000 steps; fraction of set output bits per step | ~80 s |
| `tb_aox_uniformity` | exhaustive AOX output histograms at W = 8, 10, 12; chi-square against uniform | ~10 s |
| `tb_interleaved` | 1000 generators read round-robin in groups of 10, 100 and 1000, every word checked | ~2 min to compile, 2 s to run |

Results worth knowing:

* **Zero escape.** Step 1 from a one-hot seed has exactly 1/64 of its bits set.
  The 4-step average of the set-bit fraction passes 0.45 at step 10. From step
  100 to step 1 000 000 every sampled step is within 0.5 ± 0.05, averaged over
  the 128 seeds.
* **Uniformity.** Over all 2^(2W) inputs the chi-square values are:

  | W | chi-square | degrees of freedom | 95 % critical value |
  |---|---|---|---|
  | 8 | 169.3 | 255 | 293 |
  | 10 | 611.4 | 1023 | 1099 |
  | 12 | 2205.4 | 4095 | 4245 |

  Each value is below its critical value. Exhaustive enumeration is not random
  sampling, so the statistic lands well below its degrees of freedom. The
  published study went to W = 20, which is 2^40 evaluations and too many to
  simulate. Its reported chi-square value (373 621 against a critical value of
  1 050 430 at 20 state bits) could not be matched to a definition of the
  statistic. It is not reproduced here.

Synthesis at word level shows what the structure predicts:

* `xoro_state_update`: three 64-bit XORs.
* `aox_output`: one 64-bit AND, one 64-bit OR and two 64-bit XORs.
* The top adds 128 enabled flip-flops and the seed multiplexer.

A gate-level count in a particular cell library, and the published figure of
about 680 cells at four gate levels each for update and output, cannot be
compared here.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wall -Wno-fatal \
  --top-module tb_xoroshiro128aox -y rtl -y tb +libext+.sv \
  rtl/xoro_pkg.sv tb/tb_xoroshiro128aox.sv
./obj_dir/Vtb_xoroshiro128aox
```

Replace the top-module name and the testbench file to run any other testbench.
The package file must come first on the command line.

To build with the 24/16/37 constants, set `ROT_A`, `SHIFT_B` and `ROT_C` on
the top. The package provides them as `ROT_A_2018`, `SHIFT_B_2018` and
`ROT_C_2018`. The end-to-end testbench's model uses 55/14/36. Change the three
numbers in its `m_step` task to match.
