# One datapath for Gaussian sampling and NTT polynomial multiplication

Ring-LWE key generation computes `b(x) = a(x)·s(x) + e(x)` in
`Z_q[x]/(x^n + 1)`. The secret `s` and the error `e` are drawn coefficient
by coefficient from a discrete Gaussian. That sampling needs wide additions
(Knuth-Yao) or a wide multiplication (discrete Ziggurat). Sampling and
multiplication never overlap: `s` and `e` must exist before the product can
start. So the sampler needs no arithmetic of its own. While it runs, the
adders and multipliers of the pipelined NTT multiplier are idle, and their
butterflies are rewired to do the sampler's arithmetic. A sampling control
is left with its tables, a few comparators and a small state machine.

This RTL builds that idea as one synthesizable design. The parts are:

* a reconfigurable butterfly that works as an NTT butterfly, a general
  multiplier or a general adder;
* a chain of log2(n) pipelined NTT units behind two modular
  pre-multipliers, which can also act as one wide adder or one wide
  multiplier;
* a Knuth-Yao control and a discrete-Ziggurat control, which both use that
  array;
* a general controller and three coefficient memories, which run
  `b = a·s + e` end to end.

The default parameters are the BLISS set: q = 12289, n = 512,
σ ≈ 215.73, Knuth-Yao table 1936 × 64 bits, 64-bit Ziggurat slope constant.

## The reconfigurable butterfly (`butterfly_pe`)

Each butterfly holds one modular adder, one modular subtractor and one
modular multiplier. Three multiplexer selects (`con[2:0]`) choose, for each
of them, either the NTT operands or the sampler operands:

| mode     | `con` | upper output `hi`         | lower output `lo`          |
|----------|-------|---------------------------|----------------------------|
| `PE_ORD` | 000   | `(u + v) mod q`           | `((u − v)·w) mod q`        |
| `PE_MUL` | 111   | (unused)                  | `v·w`, full 2W-bit product |
| `PE_ADD` | 111   | `u + v + cin`, W bits     | (unused); carry on `cout`  |

`PE_ORD` is a Gentleman-Sande (decimation-in-frequency) butterfly.

Each arithmetic unit has a "general" input that bypasses its modular
reduction:

* `mod_add` then returns `{cout, s} = a ± b + cin`, so adders can be
  cascaded into a wider adder.
* `mod_mul` returns the full product instead of the Barrett-reduced one.

Barrett reduction uses `μ = ⌊2^(2W)/q⌋` and two conditional subtractions.

The butterfly's results are available combinationally (`hi_d`, `lo_d`,
`cout`) and registered (`hi_q`, `lo_q`). The NTT stage uses the
combinational results. Sampling uses the registered ones.

How `con` is encoded for each mode is not given in the source; the values in
the table are this design's choice. In `PE_MUL` the lower adder forwards
`v` unchanged to the multiplier.

## NTT units and the array (`ntt_stage`, `ntt_array`)

### Streaming transform

Each `ntt_stage` is a single-path delay-feedback stage. Stage `s` of an
n-point transform pairs elements `D = n >> (s+1)` apart:

* A D-word circular buffer holds the first half of each 2D-element block.
* While the second half arrives, `u + v` leaves at once.
* `(u − v)·w` goes back into the buffer and leaves during the next D cycles.

Twiddles are `ω^(j·2^s)`, or `ω^−(j·2^s)` for the inverse transform. They
come from two ROMs that are computed at elaboration from `ω = ψ²`.

Data enters in natural order and leaves in bit-reversed order. Each stage
adds D + 1 cycles of latency. For n = 512 the array is:

* 9 stages, 511 delay words in total;
* a transform latency of `1 + (n − 1) + log2 n` cycles from the first input
  to the first output;
* a throughput of one coefficient per cycle.

A new transform may start only once the previous one has left; the
controller never overlaps transforms.

The two pre-multipliers sit in front of the chain, in series:
`pre_q = din·w0·w1 mod q`. The controller uses them for three jobs:

* the ψ^i weighting of the negative wrapped convolution;
* the pointwise product `A_k·S_k`;
* the final scaling by `ψ^−i·n^−1`.

### Wide adder (`ARR_ADD`)

The upper adders of the first `ADD_UNITS` butterflies are chained through
their carries into one `ADD_UNITS·W`-bit adder. The default is 2 × 14 =
28 bits. The sum is registered, so it is valid one cycle after the operands.
The Knuth-Yao control uses this adder.

### Wide multiplier (`ARR_MUL`)

The product `k·x` (k: KW = 64 bits, x: XW = 11 bits) is cut into
`NCH = ⌈(KW+XW)/W⌉ = 6` chunks of W = 14 bits. `k_j` is chunk j of `k`.
Each chunk product `k_j·x` is one general multiplication:

| chunk | multiplier            | adder that merges it                          |
|-------|-----------------------|-----------------------------------------------|
| 0     | pre-multiplier 0      | none: the low W bits are final                |
| 1     | pre-multiplier 1      | NTT unit 4: low(k1·x) + high(k0·x)            |
| 2     | NTT unit 0 (`PE_MUL`) | NTT unit 5: low(k2·x) + high(k1·x) + carry    |
| 3     | NTT unit 1            | NTT unit 6                                    |
| 4     | NTT unit 2            | NTT unit 7                                    |
| 5     | NTT unit 3            | NTT unit 8                                    |

So the 9 NTT units and the 2 pre-multipliers are all used: 6 multipliers
and 5 adders. Each adder puts the high part of product j−1 onto the low
part of product j. The carries ripple within one cycle. The operands must be
held for two cycles, and `mul_p` is valid in the second cycle. The Ziggurat
control uses this multiplier for its sLine value.

The source's worked example cuts k into 12-bit chunks, for q = 4093. Here
the chunk width is the coefficient width W, so the layout follows from the
parameters. An elaboration-time check stops the build when a parameter set
needs more units than the array has.

## Knuth-Yao on the borrowed adder (`ky_sampler_ctrl`)

### The walk

The distribution is stored as a bit matrix `P[row][col]`. It has NROW rows,
one for each value |x|, and LAMBDA columns, the binary digits of the
probability. Its column weights are `HD[col]`, and `HD_sum` is the sum of
all the weights. The walk keeps a signed distance `d`.

For each column:

1. Update `d = 2d + !r − HD[col]`, using one fresh random bit `r`.
2. If `d < 0`, scan the rows of that column with `d += P[row][col]`. The row
   where `d` reaches 0 is the sample magnitude. One more random bit gives
   its sign.

### How the array does the arithmetic

The control has no adder. Every update is sent to the array as one addition:

* `2d + !r` is the wire concatenation `{d, !r}`;
* `−HD[col]` is `~HD[col]` with carry-in 1.

`d` is the array's registered sum, read back one cycle later.

The width of `d` is `⌈log2(NROW·LAMBDA + 1)⌉ + 2 = 19` bits. It covers
`HD_sum` (up to 1935·64 = 123840), the doubling step and the sign. The
source quotes this bound as a 14-bit number, but 123840 needs 17 bits
before the sign and the doubling are added. Two 14-bit units are enough for
19 bits.

### Comparisons and restarts

Three comparisons steer the walk: the sign of `d`, `d == 0`, and
`d > HD_sum`. The last one means no leaf can be reached any more. The walk
then starts over from `d = 0` with fresh bits. It also starts over when all
columns are used up, which happens only with a truncated table.

### Timing and tables

A column step takes two cycles: the addition, then the check. A row step
takes one cycle.

Tables are loaded through the ports:

1. Pulse `ky_clr`.
2. Write P one bit per cycle: `ky_we`, `ky_row`, `ky_col`, `ky_bit`.

`HD` and `HD_sum` are accumulated as the ones are written.

The default table suits σ = 215.73. With 64-bit probabilities every
`|x| ≥ 1936` has probability below 2^−64, so 1936 rows are enough. Smaller
σ (for example σ = 3.33, about 31 rows) fits the same table, with the
unused rows left at zero.

## Discrete Ziggurat on the borrowed multiplier (`zig_sampler_ctrl`)

### What is stored

The Gaussian is covered by M = 8 rectangles. For rectangle i, the sampler
stores one entry:

* its right edge `x_i` and the previous edge `x_{i−1}`;
* `ȳ_{i−1} − ȳ_i`;
* the sLine slope constant `k`;
* three flag bits.

A second table holds `E(i, x) = ρ(x) − ȳ_i` for every x. All y values are
fixed point with LAM = 32 fraction bits. `k` is the line's slope times
2^32, 64 bits wide, so `k·(x_i − x)` is directly the sLine value on the
same scale.

### One attempt

Each random word `{y', x, idx, b, s}` is one attempt, with `i = idx + 1`:

| condition                     | outcome                                 |
|-------------------------------|-----------------------------------------|
| `x > x_i`                     | draw x again, same rectangle            |
| `0 < x ≤ x_{i−1}`             | accept                                  |
| `x = 0` and `b = 0`           | accept                                  |
| `x = 0` and `b = 1`           | reject                                  |
| otherwise                     | sLine test, below                       |

Keeping the rectangle on a redraw makes x uniform on `0..x_i` for the
chosen i. Redrawing the rectangle as well would weight each rectangle by its
width, and the result would no longer be Gaussian. Rejecting half of the
zeros counts 0 once rather than as both +0 and −0.

The sLine test works on two products:

* `ȳ = y'·(ȳ_{i−1} − ȳ_i)`, computed by the control's own 32 × 32
  multiplier;
* `L = k·(x_i − x)`, the expensive one, computed by the array in `ARR_MUL`.

Three flag bits replace the comparisons that depend only on i:

| flag    | stored meaning     | rule                               |
|---------|--------------------|------------------------------------|
| `below` | `x_i + 1 ≤ σ`      | accept if `ȳ ≤ L` **or** `ȳ ≤ E`   |
| `above` | `σ ≤ x_{i−1}`      | reject if `ȳ ≥ L` **or** `ȳ > E`   |
| neither |                    | accept if `ȳ ≤ E`                  |
| `flat`  | `x_{i−1} = x_i`    | sLine is −1: `L` is below every `ȳ` |

All acceptance terms are OR-ed into one accept bit. The sample is `±x`,
with the sign taken from `s`.

In the region `x ≤ σ` the curve is concave, so the chord `L` lies under it.
A point under the chord is accepted without looking at `E`. Beyond σ the
chord lies above the curve, so a point above the chord is rejected at once.
In both regions the shortcut stands in for the exact test `ȳ ≤ E`, which
the control also evaluates. In hardware both tests cost the same, so the
shortcuts matter only where the chord and the curve disagree near the
rectangle's corners.

The published algorithm prints both shortcuts with AND, and sends `x = 0`,
`b = 1` on to the sLine test. Simulated with real tables, that version gives
samples with a spread of about 1.5 σ. The OR form above, with the rectangle
kept on a redraw, gives σ to within 2 % at both σ = 215.73 and σ = 3.33.

### Timing

An attempt takes 2 cycles when it is decided without sLine, and 4 cycles
when it needs sLine. x is drawn with XW = 11 bits, so for small σ most
draws fall beyond `x_i` and are redrawn. With σ = 3.33, `x_M = 30`, this
costs about 1 M cycles for 1024 samples. A narrower x field would fix it
but needs a rebuild.

### Table loading

Write through `zg_we`, `zg_sel`, `zg_addr` and `zg_data`:

| `zg_sel` | table     | address       | data                                                  |
|----------|-----------|---------------|-------------------------------------------------------|
| 0        | rectangle | `i−1`         | packed `{x_i, x_{i−1}, dy, k, flat, below, above}`     |
| 1        | E         | `{i−1, x}`    | (LAM+2)-bit signed value in the low bits               |

## Running b = a·s + e (`gen_ctrl`, `poly_ram`, `lbc_top`)

There are three single-port-write / single-port-read memories: A (a, and
later the result), S and E. Reads are synchronous with one cycle of
latency. For one operation the host:

1. writes `a` into A through `host_we`, `host_addr` and `host_wdata`;
2. picks a sampler with `samp_sel` (`SAMP_KY` or `SAMP_ZIG`);
3. pulses `go`, then waits for `done`;
4. reads `b` back through `host_rdata`, one cycle after `host_addr`.

`gen_ctrl` then runs these phases:

| phase    | array mode          | work                                                |
|----------|---------------------|-----------------------------------------------------|
| SAMP_S   | `ARR_ADD`/`ARR_MUL` | n samples into S, stored as residues (`v < 0` → `q + v`) |
| SAMP_E   | `ARR_ADD`/`ARR_MUL` | n samples into E                                    |
| NTT_A    | `ARR_NTT`           | `NTT(a_i·ψ^i)`, written back in natural order        |
| NTT_S    | `ARR_NTT`           | `NTT(s_i·ψ^i)`                                       |
| MUL      | `ARR_NTT`, inverse  | `A_k·S_k` on the pre-multipliers, then inverse NTT   |
| POST     | pre-multipliers     | `c_i·ψ^−i·n^−1 + e_i` into A                         |

Each streaming phase takes about `2n + log2 n` cycles. The sampling phases
take what the samplers need.

At the default size, with random sources that stall 1 cycle in 8, one
complete operation takes:

* about 210 k cycles with Knuth-Yao, which is about 205 cycles per sample
  for σ ≈ 216;
* about 22 k cycles with Ziggurat, using an equal-area 8-rectangle table.

With σ = 3.33 on the same build the figures are about 20 k cycles
(Knuth-Yao) and 1.07 M cycles (Ziggurat).

The random bits (`rbit_*`, for Knuth-Yao) and the random words (`rword_*`,
for Ziggurat, `LAM + XW + log2 M + 2` bits) come from outside with
valid/ready handshakes. This design contains no random number generator.

The top holds both sampling controls, and `samp_sel` chooses between them.
A build that needs only one algorithm can drop the other control.

## Parameters

| parameter    | default | meaning                                                  |
|--------------|---------|----------------------------------------------------------|
| `Q`, `W`     | 12289, 14 | modulus and coefficient width                           |
| `N`, `PSI`   | 512, 10302 | ring degree; primitive 2n-th root of unity (11^12 mod q) |
| `NROW`, `LAMBDA` | 1936, 64 | Knuth-Yao table size                                  |
| `M`, `XW`, `LAM`, `KW` | 8, 11, 32, 64 | rectangles, sample width, y precision, k width |

The constants are in `lbc_pkg`: `Q_DEF`, `N_DEF`, `W_DEF` and `PSI_DEF`.
Other derived widths are parameters of `lbc_top`. A new `(Q, N, PSI)` needs:

* `2N` to divide `Q − 1`;
* `PSI` of order exactly `2N`.

For example, q = 4093 has no NTT for n = 256, because 512 does not divide
4092. This design therefore cannot multiply with that modulus, although its
samplers can serve σ = 3.33.

## Where this design departs from, or fills in, the published architecture

* **Taken from the source:**
  * the butterfly's three configurations and its operand multiplexers;
  * reduction bypass to get general adders and multipliers;
  * the Knuth-Yao update as one wide addition, and its three comparisons;
  * the sLine product on 6 multipliers and 5 adders, with the
    pre-multipliers and the first units multiplying and the last units
    adding;
  * stored per-rectangle flag bits;
  * OR-ed acceptance terms.
* **Corrected from the printed algorithm (Ziggurat):**
  * OR instead of AND in both sLine shortcuts;
  * `x = 0`, `b = 1` rejected;
  * the rectangle kept when x is redrawn.
  The printed rules do not give a Gaussian, as explained above.
* **This design's own choices:**
  * the pipelined NTT organisation (single-path delay feedback, DIF);
  * the chunk width (W instead of 12 bits);
  * all latencies and handshakes;
  * table formats and the way they are loaded;
  * the fixed-point scaling of the Ziggurat values, M = 8 and LAM = 32;
  * restart after the Knuth-Yao early stop;
  * the phase schedule of `b = a·s + e`, and using both pre-multipliers for
    the ψ weights;
  * three separate memories.
* **Not built:**
  * the q-specific optimisation of the referenced modular multiplier (plain
    Barrett here);
  * a random number generator;
  * FPGA-specific DSP or BRAM instantiation. Multipliers and memories are
    inferred.

## Simulation

Every module in `rtl/` has a self-checking testbench in `tb/`. Each one
ends by printing `TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench              | what it checks                                                    |
|------------------------|-------------------------------------------------------------------|
| `tb_mod_add`, `tb_mod_mul` | random and edge operands against integer arithmetic, both modes; `mod_mul` also at q = 4093, W = 12 |
| `tb_butterfly_pe`      | all three configurations, registered and combinational outputs   |
| `tb_ntt_stage`         | one stage (n = 16) against a direct model, forward and inverse    |
| `tb_ntt_array`         | n = 512 transform against a direct DFT in bit-reversed order, its latency, the wide adder and the wide multiplier |
| `tb_poly_ram`          | read/write, including read-during-write                           |
| `tb_ky_sampler_ctrl`   | samples equal to a software walk on the same bits; a full table and a truncated one, so both restart kinds occur |
| `tb_zig_sampler_ctrl`  | accepted samples, in order, against a software model of the rules (4 rectangles, random tables); each reachable branch must occur |
| `tb_lbc_top`           | n = 16, q = 12289, small sampler tables: two operations (Knuth-Yao, then Ziggurat) against a schoolbook negacyclic product; counts mode switches, sLine uses, forward and inverse transforms, random-source stalls and Ziggurat rejections |
| `tb_lbc_full`          | default size, top without parameter overrides: four operations (both samplers at σ = 215.73 and at σ = 3.33) with tables computed for σ, each checked against the schoolbook product; the samples' standard deviation must lie within 10 % of σ (about 6 k checks, a few seconds) |

The top-level tests generate their own sampler tables in SystemVerilog, so
no data files are needed. `tb_lbc_full` builds the equal-area Ziggurat
partition by bisection on the common area S. It works downwards from
`x_M = round(9σ)` and `y_M = 0`, using `y_{i−1} = y_i + S/(x_i+1)` and
`x_{i−1} = ⌊√(−2σ² ln y_{i−1})⌋`. To run one test with Verilator:

```
verilator --binary --timing -Irtl -y rtl rtl/lbc_pkg.sv tb/tb_lbc_full.sv \
          --top-module tb_lbc_full -Mdir obj_full -o sim
./obj_full/sim
```

For a block test, list the block's file, and the files of any modules it
instantiates, in place of `-y rtl`.

The Knuth-Yao restart appears at block level but not in the full-size run.
With complete tables a restart needs a 2^−64-probability event.
