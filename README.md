# Random projection + EASI: a pipelined engine that trains and runs dimensionality reduction on chip

This design reduces a stream of M-dimensional feature vectors to N dimensions, and can
learn the reduction on line. Plain EASI (Equivariant Adaptive Separation via Independence)
is an adaptive form of independent component analysis (ICA). As a pipeline its multiplier
and adder count grows as O(m·n²) in the input dimension m and output dimension n. That
limits it to small inputs.

The design splits the work in two:

1. **Random projection.** A matrix R whose entries are only −1, 0 or +1 maps the M inputs
   to P intermediate features, v = R·x. It needs adders but no multipliers. It keeps
   pairwise distances roughly intact, which is what the second-order (whitening) part of
   EASI would otherwise have to learn.
2. **EASI on the P intermediate features.** The EASI pipeline now has P inputs instead of
   M, so its cost falls by about M/P. In the main mode it learns only the rotation that
   makes the outputs independent.

The same EASI datapath also performs PCA whitening or full ICA. Two multiplexers pick
which terms of the gradient are used, so one piece of hardware covers five algorithms,
chosen at run time:

| mode                          | `rp_bypass` | `so_en` | `hos_en` |
|-------------------------------|:-----------:|:-------:|:--------:|
| random projection only        | 0           | –       | –        |
| PCA whitening                 | 1           | 1       | 0        |
| ICA (full EASI)               | 1           | 1       | 1        |
| random projection + EASI (main) | 0         | 0       | 1        |
| random projection + PCA       | 0           | 1       | 0        |

`train_en` selects between training (B is updated by every vector) and inference only
(y = B·v). In "random projection only" mode the result is read from the `v` output.

The default sizes are M = 32, P = 16 and N = 8. This is the configuration whose FPGA cost
the authors report. They use the Waveform (version 2) benchmark with its last 8 features
dropped.

## The algorithm

The separation matrix B (N×P) maps an input z to y = B·z. EASI updates B after each vector:

    H = (y·yᵀ − I)  +  (g(y)·yᵀ − y·g(y)ᵀ),      g(y) = y³ (element-wise)
    B ← B − μ·H·B

- The first term, **y·yᵀ − I**, is the second-order part. It alone drives the outputs
  towards unit covariance, and with only this term the rule is the adaptive PCA-whitening
  rule.
- The second term is antisymmetric. It rotates the outputs towards independence using
  higher-order statistics.

After random projection the second-order part is dropped (`so_en = 0`), and B only rotates.

## Datapath

```
 x[M] ─► random_projection ─► v[P] ─►┌──────────────────── easi_core ────────────────────┐
          (R ∈ {−1,0,+1})           │ S1 y=B·v ─► S2 g=y³ ─► S3 H ─► S4 G=μΣH ─► S5 B−=G·B │
                                    │   │                                        │       │
                                    │   └────────── y[N] out          B register ◄┘       │
                                    └─────────────────────────────────────────────────────┘
```

Every stage takes one vector per clock, and nothing stalls. The five EASI stages and their
operators follow the published pipeline figure:

| stage | module                     | operators (defaults P = 16, N = 8)                        | latency (clocks)        |
|-------|----------------------------|-----------------------------------------------------------|-------------------------|
| RP    | `random_projection`        | P rows of ±/0 selectors, P tree adders of M inputs         | 1 + ⌈log₂M⌉ = 6         |
| S1    | `easi_s1_separation`       | N·P = 128 multipliers, N tree adders of P inputs          | 1 + ⌈log₂P⌉ = 5         |
| S2    | `easi_s2_nonlinearity`     | 2·N = 16 multipliers (y², then y²·y)                      | 2                       |
| S3    | `easi_s3_gradient`         | 2·N² = 128 multipliers, 3·N² adders, term multiplexers    | 3                       |
| S4    | `easi_s4_relative_gradient`| N² = 64 multipliers (μ·H), N² accumulating adders          | 2                       |
| S5    | `easi_s5_update`           | N²·P = 1024 multipliers, N·P tree adders of N, N·P subtractors | 2 + ⌈log₂N⌉ = 5     |

`tree_adder` is the pipelined adder tree used by RP, S1 and S5. It has one register per level.

In S3, y·g(y)ᵀ is the transpose of g(y)·yᵀ, so it is read from the same products rather
than multiplied again.

The multiplier count is N·P + 2N + 3N² + N²·P. For the default build that is 1360. With
random projection bypassed and P = M = 32, the same N = 8 engine needs 2512. That is the
M/P saving the scheme is built around.

## Timing, and what happens when B changes under a full pipeline

This is the least obvious part of the design. Take a vector x presented in clock c (that
is, sampled at the edge ending clock c):

| event                                                      | clock (defaults)               |
|------------------------------------------------------------|--------------------------------|
| v valid                                                    | c + 6                          |
| S1 reads B and forms B·v                                   | at the edge after c + 6        |
| y valid                                                    | c + 11                         |
| S5 reads B to form G·B (last vector of a mini-batch)       | at the edge after c + 18       |
| B written, `upd_valid` high                                | c + 23                         |

A new vector can enter every clock, so up to 17 vectors can be in the EASI pipeline while a
given update is still in flight. The design does not stall for this. Instead:

- S1 always uses the newest B written so far. A vector's y may therefore miss the updates
  from the last few vectors ahead of it.
- S5 forms ΔB = G·B from the B it sees when G arrives. Four clocks later it subtracts ΔB
  from the *current* B, not from the copy it read. Back-to-back updates therefore all take
  effect, each computed from a B that is a few updates old (a delayed gradient).

With a small learning rate the difference from the strictly sequential rule is second
order in μ. If exact sequential EASI is needed, leave 17 idle clocks between training
vectors. The result is then identical to the textbook update. The published design runs at
one vector per clock and does not describe its handling of this dependence, so the scheme
above is this implementation's own.

## Number format

All datapath words are 32-bit signed fixed point with 16 fraction bits (Q15.16), set in
`dr_pkg` (`DATA_W`, `FRAC_W`).

- A multiply forms the full 64-bit product and rounds off 16 fraction bits (to nearest, ties upward). Truncation would bias every product by half an LSB, and that bias accumulates in B over thousands of updates.
- Additions wrap. There is no saturation: keep the inputs scaled so that y³ and the sums
  stay inside ±32768.

**This is a departure.** The published implementation uses 32-bit floating point, with
operators from the FPGA vendor. Fixed point keeps the RTL self-contained and makes every
result bit-exact against a simple model. It does not reproduce the floating-point dynamic
range.

## Interfaces (`dr_top`)

| port                                        | direction | meaning |
|---------------------------------------------|-----------|---------|
| `clk`, `rst_n`                              | in  | clock; asynchronous active-low reset |
| `mode` (`mode_t`: `rp_bypass`, `so_en`, `hos_en`, `train_en`) | in | algorithm select, see the table above |
| `mu`                                        | in  | learning rate, Q15.16 (for example 66 ≈ 0.001) |
| `r_wr_en`, `r_wr_row`, `r_wr_data[M]`       | in  | write one row of R; codes `R_POS` = 01, `R_NEG` = 11, `R_ZERO` = 00 |
| `b_wr_en`, `b_wr_row`, `b_wr_col`, `b_wr_data` | in | write one element of B (load a trained model) |
| `b[N][P]`, `upd_valid`                      | out | the separation matrix; high in the clock B was updated |
| `in_valid`, `x[M]`                          | in  | input vector |
| `v_valid`, `v[P]`                           | out | random-projection output |
| `y_valid`, `y[N]`                           | out | EASI output |

Reset behaviour:

- R resets to all zeros. Load it before use.
- B resets to [I 0]: ones on the leading diagonal, zeros elsewhere.
- The S4 accumulator and all valid bits reset to zero. The data pipeline registers are not
  reset, and are ignored until their valid bit is set.

R is generated off line. The published distribution gives each element the value +1 or −1
with probability 1/(2P) each, and 0 otherwise. It is then written one row per clock.

Change `mode.so_en`, `mode.hos_en` or `mu` only when no training vector is in flight. They
are sampled in S3 and S4, several clocks after the vector entered. `train_en` is sampled as
the vector leaves S1.

With `rp_bypass = 1`, R is replaced by the P×M identity at the same latency, so EASI sees
x[0..P−1]. Running PCA or ICA on all M inputs therefore needs a build with P ≥ M. That is
the "EASI alone" baseline of the evaluation.

## Parameters and the evaluated configurations

`dr_top #(M, P, N, BATCH)`: the defaults are 32, 16, 8 and 1.

`BATCH` sets the mini-batch size of stage S4. G accumulates μ·H over `BATCH` vectors, and
B is updated once per batch. `BATCH = 1` is the plain per-vector rule.

Non-power-of-two sizes work; the adder trees are zero padded.

| configuration from the evaluation (Waveform, 32 inputs)  | runs on the default build? |
|----------------------------------------------------------|----------------------------|
| random projection 32→16, EASI →8 (the reported hardware) | yes                        |
| random projection 32→24, EASI →16                        | needs `P=24, N=16`         |
| EASI alone 32→8 (baseline)                               | needs `P=32`, `rp_bypass=1` |
| EASI alone 32→16                                         | needs `P=32, N=16`         |

The accuracy studies on MNIST (784 inputs), HAR (561) and Ads (1558) were run in software.
They would need a build with that M.

The training set is 4000 vectors. It is streamed, not stored: one pass takes about 4000
clocks plus the 23-clock pipeline depth. The authors report 106.64 MHz after place and
route on an Arria 10 for their floating-point version. This RTL has not been placed and
routed.

## Departures from the published design, and choices made here

- **Arithmetic.** Q15.16 fixed point instead of 32-bit floating point (see above).
- **Stage S4** ("update relative gradient") is published only as a name and an operator
  count (N² multipliers, N² adders). Here the multipliers apply μ and the adders accumulate
  a mini-batch. With `BATCH = 1` this is exactly the EASI rule.
- **Pipeline hazard on B.** The stale-read / incremental-write scheme described above is
  this implementation's own.
- **Tree adders** have a register after every level. The published figure shows registers
  inside the tree but not how many.
- **Random-projection module.** Its structure (select ±x or 0, then a tree) and its load
  port, the bypass, the mode encoding, the reset values, the B write port and all
  handshakes are this implementation's choices. The published description gives only the
  function of these parts.
- **Not included.** The floating-point operator library, the FPGA device itself, and the
  neural-network classifier used to measure accuracy.

## Verification

Each module has a self-checking testbench in `tb/`. Each one compares every output, bit for
bit, with a model written independently in the testbench, and checks every latency in the
table above. Each prints `TB_RESULT checks=… failures=…`.

| testbench                       | what it checks |
|---------------------------------|----------------|
| `tree_adder_tb`                 | sums for N = 8 and N = 5 (padding), 3-clock latency, one sum per clock |
| `random_projection_tb`          | v = R·x for a random ternary R, bypass, gaps in the stream |
| `easi_s1_separation_tb`         | y = B·z for four random B |
| `easi_s2_nonlinearity_tb`       | y³ with the same rounding |
| `easi_s3_gradient_tb`           | all four term selections; antisymmetry of the rotation term |
| `easi_s4_relative_gradient_tb`  | μ·H for a batch of 1, accumulation and pulse timing for a batch of 3 |
| `easi_s5_update_tb`             | reset value, element loads, isolated and back-to-back delayed updates |
| `easi_core_tb`                  | the whole EASI pipeline with a batch of 2: PCA, ICA, rotation-only, inference |
| `dr_top_tb`                     | the full design at default size; see below |
| `waveform_workload_tb`          | training at default size on generated Waveform-like data (see below) |
| `waveform_24_16_tb`             | the same training on a 32→24→16 build (the evaluation's larger configuration) |

`dr_top_tb` runs a cycle-accurate model of the whole design beside it, including the
delayed updates. It checks v, y, B and `upd_valid` every clock while going through every
mode. It counts the mechanisms it exercises and fails if any of them never occurs:
projection, bypass, PCA, ICA, random projection + EASI, inference, updates, overlapping
updates, B loads and R loads.

`waveform_workload_tb` checks the purpose of training rather than bit patterns. It
generates 5000 vectors shaped like the Waveform benchmark: the benchmark's generator rebuilt
from its public description (three triangular base waves mixed pairwise, plus Gaussian noise
and noise-only features), cut to 32 features, centred and halved. It then:

1. trains random projection + PCA whitening for three passes at one vector per clock
   (μ = 2⁻⁹);
2. checks that the test-set outputs have a covariance within 0.25 of the identity;
3. trains the rotation-only mode for one pass (μ = 2⁻¹³), and checks that B moved and the
   outputs stayed white.

`waveform_24_16_tb` repeats this on a build with P = 24 and N = 16. It uses a rotation step
of 2⁻¹⁴ and an off-diagonal limit of 0.2, because there are more output pairs to estimate
from the same test set.

A practical point when drawing R: with so few nonzeros per row, two rows can end up nearly
equal. Their outputs then cannot be decorrelated by any B. The workload tests therefore
force one nonzero per row in a distinct column.

With a larger rotation step (μ = 2⁻¹⁰) the rotation-only update grows B without bound. The
first-order update I − μA, with A antisymmetric, is not exactly orthogonal: it stretches B
by a factor 1 + O(μ²) per step. Only the second-order term pulls B back. Keep μ small in
that mode.

To run a testbench with Verilator 5 (the package goes first):

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -y rtl rtl/dr_pkg.sv tb/dr_top_tb.sv --top-module dr_top_tb
./obj_dir/Vdr_top_tb
```

The full-size testbench compiles in about a minute and runs in seconds.

Concurrent assertions in the RTL also check that R and B writes address existing rows and
elements, and that the mini-batch counter stays in range. Run with `--assert` to enable
them.

What the tests do not establish:

- They check that the RTL does what is described here, bit for bit. They do not check that
  the fixed-point engine reaches the published classification accuracy.
- Nothing here has been synthesised for an FPGA or timed.

## Files

| file | contents |
|------|----------|
| `rtl/dr_pkg.sv` | word type `fx_t`, `fx_mul`, the R code `rp_code_t`, the mode struct `mode_t` |
| `rtl/tree_adder.sv` | pipelined adder tree |
| `rtl/random_projection.sv` | ternary random projection with R storage and bypass |
| `rtl/easi_s1_separation.sv` … `rtl/easi_s5_update.sv` | the five EASI stages; S5 owns B |
| `rtl/easi_core.sv` | S1–S5 wired into one pipeline |
| `rtl/dr_top.sv` | random projection followed by the EASI core |
| `tb/*_tb.sv` | one testbench per module, plus the Waveform-style training test |
