# TableNet MLP: neural-network inference with look-up tables and adders

Once a network is trained, its weights never change, so every product
`w * x` that inference would compute can be worked out in advance and
stored. This design evaluates a dense layer `y = W x + b` without a single
multiplier. It splits the input into bits, uses each group of bits as the
address of a precomputed table (a LUT), and adds up the rows it reads.
Activations are cut into **bitplanes** (bit *j* of every input element), and
one table is reused for every plane, so the tables stay small. The partial
results are then combined by shifting and adding.

The RTL implements a complete classifier of this kind: a 784-1024-512-10
multilayer perceptron for 28x28 images. The first layer takes 8-bit
fixed-point pixels. The two hidden activation vectors are IEEE 754 binary16
(half precision). A binary16 number cannot simply be split into bitplanes:
its exponent must stay whole and goes into every table address. The design
handles both formats, two's-complement inputs, and LUT-based stochastic
rounding. The layer sizes, input formats and table partitioning follow
the MLP of the TableNet paper by C. W. Wu ("TableNet: a multiplier-less
implementation of neural networks for inferencing"). The schedule,
number formats inside the tables, interfaces and control are this design's
own.

## 1. The arithmetic

### Fixed-point inputs

Let `x` have `Q` unsigned elements of `N` bits, `x_q = sum_j a_qj 2^j`.
Then

    W x = sum_j 2^j * ( W * a_.j )        a_.j = bitplane j (one bit per element)

and `W * a_.j` is a sum of table reads. Cut the `Q` elements into `K`
segments of `M` elements each. The `M` bits of plane `j` in segment `s` form
an `M`-bit address into table `s`. The table holds, for each bit pattern,
the sum of the weight columns whose bit is set. The same `K` tables serve
all `N` planes. `fxp_lut_affine` reads the planes MSB first and uses Horner's
rule: at the first table of every plane the accumulator is doubled, and then
the `K` rows are added.

*Signed inputs.* In two's complement the MSB weighs `-2^(N-1)`. The tables
are not changed: the rows read for the MSB plane are **subtracted** instead
of added. The remaining `N-1` doublings then give them their `2^(N-1)`
weight. This is the same as looking up the MSB plane, shifting the result
left by `N-1` and subtracting it from the rest. `is_signed` selects this
mode.

### binary16 inputs

A binary16 value is `S * 2^(E-25)`, where `S` is the 11-bit significand with
its implicit bit and `E` is the 5-bit exponent field. Subnormals use
`max(E,1)` and an implicit bit of 0. The significand can be split into 11
bitplanes. The exponent cannot, so each table address is
`{plane bits of the M elements, the M exponent fields}`: `6*M` bits. Again
one table serves all 11 planes.

`fp_lut_affine` takes the planes **LSB first**. Before each new plane it
shifts the running sum right by one bit, then adds the plane's rows. After
the last (most significant) plane, plane *j* carries weight `2^(j-10)`, so
the LSB plane's rows are used as if the significand's MSB had weight 1. To
keep these right shifts exact, the accumulator carries 10 fraction bits
below the table LSB. The result is

    A_p = sum_e S_e * T_e[E_e][p]   (+ bias * 2^10),   in units of 2^-10 table LSB

exactly, with no rounding inside the layer. The sign bit is ignored: the
hidden activations come out of a ReLU and are never negative.

### Stochastic rounding

A layer's wide fixed-point output has to be rounded to binary16.
`stoch_round` implements the rule

    f(x, i) = floor(x)        if r(i) <= 1 + (floor(x) - x)/eps
              floor(x) + eps  otherwise

Here `i` is a counter that moves on (modulo `R`) at every access, and
`r(i)` is a fixed sequence in (0, 1]. The decision depends only on `i` and
on the fraction of `x`, so the table is stored factored: one round-up bit
for each `(i, fraction)` pair, `R * 2^D` bits (256 bits with `D = 4`,
`R = 16`). The integer part is incremented by that bit.

The sequence is `r(i) = u(i)/2^D` with `u(i) = (i*STEP mod 2^D) + 1` and
`STEP` odd (9 for `D = 4`). Each period therefore visits every threshold once,
and over a period the rounded values average exactly to `x`, for any
fraction that `D` bits can represent. The table is computed from this formula
at elaboration, not read from a file.

## 2. The MLP datapath

    x[784] 8-bit ──► layer 1: fxp_lut_affine  784 LUTs x 2 rows, 8 planes ──► y1[1024]
                     │
                     ▼ one value per cycle: relu ► fp16_quant(SCALE1) ► h1[1024] binary16
                     │
    h1 ─────────────► layer 2: fp_lut_affine   1024 LUTs x 64 rows, 11 planes ──► y2[512]
                     │
                     ▼ relu ► fp16_quant(SCALE2) ► h2[512]
                     │
    h2 ─────────────► layer 3: fp_lut_affine    512 LUTs x 64 rows, 11 planes ──► y3[10]
                     │
                     ▼ argmax ► label, scores

`tablenet_mlp` runs these stages one after another under a small state
machine: `IDLE → L1 → Q1 → L2 → Q2 → L3 → DONE`. The input image is
registered when `start` is accepted. Each layer unit has its own table
memory and reads **`LANES` table rows per cycle** (one with the default
`LANES = 1`). Each row adds to all `P` outputs in parallel (1024, 512 or 10
adders per lane). Each
conversion pass turns one accumulator into binary16 per cycle and writes it
into the `h1` or `h2` buffer. The next layer reads every value 11 times, once
per plane, so it must be rounded exactly once; that is why the values are
buffered rather than converted on the fly.

Every table has one element per LUT (`M1 = M2 = M3 = 1`), so the design has
784 + 1024 + 512 = 2320 LUTs, the paper's binary16 MLP configuration.

### Timing

| stage | cycles (defaults) |
|---|---|
| layer 1 | 8*784 + 4 = 6276 |
| conversion 1 | 1024 |
| layer 2 | 11*1024 + 4 = 11268 |
| conversion 2 | 512 |
| layer 3 | 11*512 + 4 = 5636 |
| result | 1 |

A layer stage takes `planes*G + 4` cycles, where `G = ceil(K/LANES)` is the
number of reads per plane. The 4 extra cycles are the start handshake, the
bias row, the memory's read latency and the hand-over. With the defaults
`done` rises 24717 clock edges after the edge that accepts `start`. `label`
and `scores` stay valid until the next `start`. The layer units alone take
`N*G + 2` and `11*G + 2` cycles from an accepted `start` to `done`.

### Parallel LUT reads (`LANES`)

With `LANES > 1` a layer's memory is split into `LANES` banks (`lut_bank`
instances). LUT `s` lives in bank `s mod LANES`, at row
`(s div LANES)*2^IW + index`, where `IW` is the LUT's index width. The bias
row sits in bank 0, after the last group. In each cycle the unit reads LUTs
`g*LANES ... g*LANES + LANES-1` from the banks at once. An adder tree sums
the rows before they reach the accumulator. A lane whose LUT number is
`K` or more (in the last group when `K` is not a multiple of `LANES`)
contributes zero. The load port keeps the flat address of section 3; the
unit routes each write to its bank.

## 3. Loading the tables

The tables are computed off-chip from the trained weights and written while
the design is idle. The load port is `ld_en`, `ld_layer` (1, 2 or 3),
`ld_addr` and `ld_data`. Entry `p` of a row sits in `ld_data[p*16 +: 16]`
and is a signed 16-bit integer. A load during a run is rejected and flagged
by an assertion.

Layer 1 (fixed point, `M1 = 1`, integer pixel values):

    row 2*q + a        = a * round(w1[q][p] * 2^SCALE1)      a = 0 or 1
    row 2*784 (bias)   = round(b1[p] * 2^SCALE1)

Layers 2 and 3 (binary16, `M = 1`). For input `e`, the plane bit `a` and the
exponent field `E` give

    row 64*e + 32*a + E  = a * round(w[e][p] * 2^(max(E,1) - 25 + SC))
    row 64*K (bias)      = round(b[p] * 2^(SC - 10))

The layer's integer output `A` then stands for `y = A * 2^-SC`, where
`SC` is `SCALE2` for layer 2. The `-10` in the bias row appears because the bias is
added shifted by the accumulator's 10 extra fraction bits. `SCALE1` and
`SCALE2` tell the binary16 converters where these binary points lie, so
tables and parameters must agree. Layer 3 only feeds the argmax, so its
`SC` is free.

For `M > 1` a row is the sum of these terms over the `M` elements of the
segment, and the address is built as described at the top of
`fxp_lut_affine.sv` and `fp_lut_affine.sv`.

**Range of the entries.** With 16-bit fixed-point entries, the binary16 rows
cover only part of the exponent range: `w * 2^(E-25+SC)` overflows 16 bits
for large `E`. The table builder has to clip those entries, or pick `SC` so
that the exponents the activations actually reach fit. This is the main
price of using fixed-point table entries, and one reason `RO` (entry width)
is a parameter.

## 4. Binary16 conversion (`fp16_quant`)

The converter finds the leading one of the (ReLU-clipped) accumulator. The
11 bits from it downward become the significand. The next 4 bits are the
rounding fraction for `stoch_round`; in truncating mode they are dropped.
Values below 2^-14 become subnormals. A rounding carry out of the
significand moves into the exponent by plain addition on the packed
`{exponent, fraction}` word. Values above 65504 saturate to `0x7BFF` and
set `sat_seen` on the top. The converter produces no infinities or NaNs.
`rnd_mode` (truncate or stochastic) and `in_signed` are sampled at `start`.

## 5. Where this departs from the paper

- **Table entry format.** The paper's examples give tables 16-bit
  half-precision outputs. Here entries and accumulators are signed fixed
  point, so all adds are exact integer adds and no floating-point adder is
  needed.
- **Bias.** The paper folds `b/k` into each of the `k` tables. With bitplane
  reuse a bias inside a table would be added once per plane, so the bias has
  a row of its own, read once at the end of a layer.
- **Time-shared lookups.** The paper points out that the lookups can all
  run in parallel. Here `LANES` lookups run per cycle, one by default, so
  a layer needs `ceil(K/LANES)` cycles per plane. `LANES = K` gives the
  fully parallel case but needs `K` memories and a `K`-input adder tree per
  output.
- **Partition size.** The paper's fixed-point section says one-element
  segments bring no saving. Its 2320-LUT MLP configuration nevertheless uses
  one element per LUT, and the defaults follow that configuration. The
  partition size `M` is a parameter of each layer.
- **Table size.** With 16-bit entries this design needs 67.7 MiB of tables
  (3.06 + 64.0 + 0.63 MiB). The paper quotes 162.6 MiB for the same
  configuration without giving its entry format.
- **Conversion details.** The binary16 conversion, stochastic rounding as a
  selectable mode of it, saturation, subnormals, the choice of `r(i)`, the
  load port, the handshakes and the reset are this design's own.
- **Not built.** There is no convolution layer (a LUT mapping an m x m input
  block to its (m+2r) x (m+2r) output block, shifted in space and added),
  no pooling, and no mode that uses the whole 16-bit binary16 word as an
  address. Tables indexed by a group of adjacent bitplanes at once (an
  option the paper mentions) are not offered: every lookup uses one plane.
  The binary16 layer ignores the sign bit, which ReLU makes zero; signed
  binary16 input is not handled. So the paper's LeNet CNN and its 32.7 GiB configuration cannot be
  run. The linear classifiers it evaluates (784x10, 3-bit pixels, 56 LUTs of
  14 pixels or 784 LUTs of one) are layers that `fxp_lut_affine` supports
  with parameters. `tb_linear_classifier` runs both.

## 6. Verification

Every module has a self-checking testbench, `tb/tb_<module>.sv`, that
compares against a model written without the RTL's shortcuts. The
testbenches compute weights times inputs directly, convert to binary16 by
binary search over real values, and apply the stochastic rounding rule in
real arithmetic (`tb_fp16_pkg`). Where a latency is defined it is checked
to the cycle.

- `tb_tablenet_mlp`: the whole MLP at reduced size (20-12-8-4) with
  `LANES = 3`, three weight sets, 12 images. It checks every binary16 activation, every score,
  the label, `sat_seen` and the run length. It also counts that signed and
  unsigned input, both rounding modes, a stochastic round-up, ReLU clipping,
  saturation and subnormals all occurred.
- `tb_tablenet_mlp_full`: the design at its default size, two complete
  classifications (about 100k table rows loaded; a few seconds in
  verilator).
- `tb_linear_classifier`: the 784x10 classifier in both partitions,
  including the 17.5 MiB 56-LUT table.

To run one with verilator:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/tablenet_pkg.sv tb/tb_fp16_pkg.sv tb/tb_tablenet_mlp.sv \
        --top-module tb_tablenet_mlp -o sim
    ./obj_dir/sim

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog if the design hangs.

## 7. Files

| file | contents |
|---|---|
| `rtl/tablenet_pkg.sv` | binary16 type and constants, rounding-mode enum |
| `rtl/lut_bank.sv` | table memory bank: write port, synchronous read |
| `rtl/fxp_lut_affine.sv` | fixed-point bitplane LUT layer, signed option |
| `rtl/fp_lut_affine.sv` | binary16 bitplane-plus-exponent LUT layer |
| `rtl/relu.sv` | ReLU |
| `rtl/stoch_round.sv` | LUT stochastic rounding |
| `rtl/fp16_quant.sv` | fixed point to binary16 |
| `rtl/argmax.sv` | label selection |
| `rtl/tablenet_mlp.sv` | top: the 784-1024-512-10 MLP |
| `tb/*.sv` | testbenches and the reference package |
