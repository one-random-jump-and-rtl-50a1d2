# A chaotic-iteration PRNG for FPGAs: four 8-bit random jumps and one permutation

This generator post-processes an ordinary fast pseudorandom generator, the
*strategy*. Each step, it moves a 32-bit internal state by a random walk. The
strategy word decides which bits of the state are updated by a fixed Boolean
function `f`. A bijective scrambling permutation of the new state is the output.

The construction comes from the theory of chaotic iterations. Iterating `f`
under a strategy is chaotic in Devaney's sense when the iteration graph of `f`
is strongly connected. A bijection applied to the output keeps that property,
because the output map is conjugate to the state map. The design keeps the
hardware small by splitting the state into four independent 8-bit blocs. The
permutation then mixes the blocs together again, so the output has the
statistics of a 32-bit generator and not of four 8-bit ones. According to the
published results, all six combinations of function and strategy listed below
pass TestU01 BigCrush. The fastest combination reaches 32 bits per clock at
about 210 MHz on a Zynq-7000, about 6.7 Gbit/s.

The RTL here implements the complete generator datapath, the three strategy
generators and both iterated functions. It was written from the published
description. Where that description is silent, this README and the file
headers say what was chosen.

## One step of the generator

With `x` the 32-bit state and `s` the 32-bit strategy word:

```
for each bloc l in A, B, C, D            (A = bits 31:24 ... D = bits 7:0)
    for each bit i in 0..7
        x'_l[i] = s_l[i] ? f(x_l)[i] : x_l[i]
x    <- x'                               (fed back as the next state)
out  =  perm(x')
```

Each bloc does one *generalized chaotic iteration*. The strategy byte is read
as a set of components, and only those components take their value from `f`.
The four blocs do not interact. All the coupling between them comes from the
permutation at the output, which the state never goes through: the state
evolves only by the iterations.

### The iterated function `f`

Two functions `B^8 -> B^8` are supported (`bool_func.sv`, parameter `FUNC`):

* **NEG**: `f(x) = ~x`. Its iteration graph is the whole 8-cube: from any state,
  any subset of bits can be flipped in one step.
* **F1**: the published 256-entry table, `F1_TABLE` in `ciprng_pkg.sv`. Each
  entry is `~x` with exactly one bit flipped back. So F1's iteration graph is
  the 8-cube with one directed edge removed at every vertex. Following the
  removed edges from 0 visits all 256 vertices once and returns to 0. This
  path is a Hamiltonian cycle that uses each of the 8 dimensions exactly 32
  times, which makes it *balanced*. Removing such a cycle keeps the graph
  strongly connected and makes the process harder to invert than NEG.
  `tb_bool_func` checks all three properties of the table.

In hardware, NEG is eight inverters. F1 is a 256 x 8 constant table, which
synthesis maps to LUT logic.

### The strategy

The strategy is one of three well-known generators, chosen at build time with
`STRATEGY` in `strategy_prng.sv`:

| `STRATEGY`          | Generator                                                   | State    |
|---------------------|-------------------------------------------------------------|----------|
| `STRAT_TAUS88`      | L'Ecuyer's 3-component combined Tausworthe (Taus88)        | 96 bits  |
| `STRAT_LFSR113`     | L'Ecuyer's 4-component combined Tausworthe (LFSR113)       | 128 bits |
| `STRAT_XORSHIFT128` | Marsaglia's 32-bit xorshift128 (default)                    | 128 bits |

The source names these generators without giving their recurrences. The
standard published recurrences are used, and their shift and mask constants
are listed in each file's header. Its results table labels the third generator
"xorshiftP128", while its text says "xorshift128". The 32-bit Marsaglia
generator was chosen because it yields exactly one 32-bit strategy word per
step. `tb_xorshift128` checks Marsaglia's known first output for the default
seed (3701687786).

### The permutation

`perm_rxs.sv` is a random-xorshift / multiply / xorshift scrambler, the same
shape as the output function of PCG32:

```
word1 = (in >> ((in >> 28) + 4)) ^ in     // shift of 4..19, picked by the top nibble
word2 = word1 * B                          // modulo 2^32
out   = (word2 >> 22) ^ word2
```

Each step is invertible when `B` is odd, so `perm` is a bijection on 32-bit
words. This is what the chaos argument needs. The published multipliers are
small: **B = 95 with NEG and B = 811 with F1**. In the source, these are the
smallest values with which each combination passed BigCrush. With these
constants the multiplier reduces to a few shifted additions (no DSP block is
needed on an FPGA). That is why F1 builds, with the larger multiplier, run at
a lower clock.

## Pipeline and interface (`ciprng_top.sv`)

| Port        | Dir | Width | Meaning                                             |
|-------------|-----|-------|-----------------------------------------------------|
| `clk`       | in  | 1     | clock                                               |
| `rst_n`     | in  | 1     | synchronous active-low reset to built-in seeds      |
| `load`      | in  | 1     | load `seed_x` into the state and `seed_s` into the strategy; empties the pipeline; wins over `en` |
| `seed_x`    | in  | 32    | initial state x^0                                   |
| `seed_s`    | in  | 128   | strategy seed, one 32-bit state word per 32 bits from bit 0 (Taus88 ignores the top word) |
| `en`        | in  | 1     | start one generator step this cycle                 |
| `out`       | out | 32    | output word                                         |
| `out_valid` | out | 1     | `out` was written with a new word on the last edge  |

There are three register stages. The clock edge that samples `en` registers
the strategy word `s`. The next edge writes `x <- x'`, and the edge after that
writes `out <- perm(x')`. A word started with `en` is therefore on `out` after
three clock edges, the "design latency 3" of the published results. With `en`
held high a new word leaves every clock ("output latency 1"), which is 32 bits
per clock. Dropping `en` stalls the generator. Each stage moves only when the
stage before it holds a new value, so no strategy word is skipped or used
twice.

Invalid seeds are repaired so that a generator cannot be locked up:

* the Tausworthe components below their minimums (2, 8, 16, 128) get one bit set;
* an all-zero xorshift128 seed is replaced by Marsaglia's default seed.

The state seed `seed_x` may be any value.

Parameters of `ciprng_top`:

| Parameter  | Default             | Meaning                                         |
|------------|---------------------|-------------------------------------------------|
| `FUNC`     | `FUNC_NEG`          | iterated function, `FUNC_NEG` or `FUNC_F1`      |
| `STRATEGY` | `STRAT_XORSHIFT128` | strategy generator                              |
| `B`        | 95                  | permutation multiplier (use 811 with F1)        |
| `N`, `NBLOC` | 32, 4             | state width and bloc count; only 32 / 4 is supported, and an elaboration-time assertion checks it |

The defaults are the combination the source reports as its best: NEG,
xorshift128 and B = 95.

## The six evaluated combinations

| FUNC | STRATEGY    | B   | Published clock | Published LUT / FF |
|------|-------------|-----|-----------------|--------------------|
| NEG  | Taus88      | 95  | 200 MHz         | 222 / 274          |
| NEG  | LFSR113     | 95  | 202 MHz         | 250 / 306          |
| NEG  | xorshift128 | 95  | 210.7 MHz       | 224 / 306          |
| F1   | Taus88      | 811 | 162 MHz         | 426 / 336          |
| F1   | LFSR113     | 811 | 165 MHz         | 431 / 368          |
| F1   | xorshift128 | 811 | 167.5 MHz       | 420 / 368          |

This RTL's own register count is lower than the published flip-flop counts. The
default build has 227 flip-flops: 128 for the strategy state, 32 for the
strategy word, 32 for the state, 32 for the output and 3 for the valid flags.
The published figures were measured inside a bus wrapper whose registers are
probably included. That wrapper is not part of this RTL. The published flip-flop
counts also differ between NEG and F1 by 62 bits, which the described datapath
does not account for. So the published implementations held registers this
description does not show, and cycle timing against them cannot be confirmed
beyond the stated latencies.

## Where this RTL is its own

These points are design choices, not taken from the published description:

* **Bit and bloc order.** Bloc A is the most significant byte, and set element
  `i+1` is bit `i`. The order of the blocs does not change NEG's statistics,
  but it does fix which exact sequence F1 builds produce.
* **Width of the multiplication.** The product is kept modulo 2^32, as the
  algorithm's 32-bit words imply. The prose describes the multiplication as
  working in the group modulo 2^31 - 1, which the algorithm does not do.
* **Shift range.** The prose also says that the first step "scrambles between
  17 and 28 rightmost bits". The algorithm, which was followed, shifts by 4 to
  19 bits.
* **Control.** The pipeline split, the `load` / `en` / `out_valid` interface,
  the reset seeds and the seed repair are this design's own.
* **Build-time selection.** One strategy generator and one function are built
  per instance, as each published result is a separate implementation. There is
  no run-time selector.
* **Not included.** The bus wrapper and the processor system of the evaluation
  platform are not part of this RTL.

## Files

| File | Contents |
|------|----------|
| `rtl/ciprng_pkg.sv`    | enums `func_e`, `strategy_e`; multipliers `B_NEG`, `B_F1`; `F1_TABLE` |
| `rtl/bool_func.sv`     | `f`: NEG or F1 |
| `rtl/icg_block.sv`     | one 8-bit chaotic iteration |
| `rtl/taus88.sv`, `rtl/lfsr113.sv`, `rtl/xorshift128.sv` | strategy generators |
| `rtl/strategy_prng.sv` | build-time choice of strategy generator |
| `rtl/perm_rxs.sv`      | output permutation |
| `rtl/ciprng_top.sv`    | the generator |
| `tb/tb_ref_pkg.sv`     | software reference model of every part and of the whole generator |
| `tb/tb_*.sv`           | self-checking testbenches, one per module |
| `tb/tb_ciprng_configs.sv` | all six combinations side by side |

## Verification

Every testbench compares the RTL cycle by cycle with the reference model in
`tb/tb_ref_pkg.sv`. That model is written as plain sequential code from the
algorithm descriptions. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog.

* `tb_bool_func` checks NEG exhaustively. For F1 it checks 16 hand-copied
  table entries and the one-bit and balanced-Hamiltonian-cycle structure of
  the table.
* `tb_icg_block` checks all 65,536 (x, s) pairs for NEG, and for F1 the corner
  strategies and 20,000 random pairs.
* `tb_perm_rxs` checks hand-worked vectors, every shift amount and random words
  for both multipliers, plus that 4,096 inputs give distinct outputs.
* `tb_taus88`, `tb_lfsr113`, `tb_xorshift128` and `tb_strategy_prng` check
  about 6,000 words per generator. The runs cover reset, reseeding with random
  and invalid seeds, and stalls.
* `tb_ciprng_top` runs the default build end to end, checking about 48,000
  words against the model. It measures the three-edge latency, checks 2,000
  words in 2,000 cycles at full rate, and covers random stalls, reseeds with
  words in flight and a mid-run reset. It counts each of these events and fails
  if any never happened.
* `tb_ciprng_configs` runs the six combinations for 20,000 words each. It
  checks them word for word and checks the one-word-per-clock rate. As a coarse
  sanity check, it also requires every output bit to be set in 48.5-51.5 % of
  the words.

The statistical claims (TestU01, NIST) are not reproduced here. They need
billions of output words and a software test battery.

### Running a testbench

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_ciprng_top rtl/ciprng_pkg.sv tb/tb_ref_pkg.sv tb/tb_ciprng_top.sv
./obj_dir/Vtb_ciprng_top
```

Replace the top module and the last file to run another testbench. Each one
runs in well under a second.
