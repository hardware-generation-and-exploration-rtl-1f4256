# A lookup-table GEMV engine for ternary-weight LLM inference

Models quantised in the BitNet b1.58 style keep their weights in {-1, 0, +1}.
A matrix-vector product with such weights needs no multiplier. Each output
is a signed sum of activations, and a multiplier-based datapath wastes most
of its area. This engine goes one step further. It takes the activations in
groups of μ and precomputes every signed sum of a group once, into a small
lookup table (LUT). Each group of μ weights then becomes an index into that
table. One table read replaces μ conditional additions, and the same table is
read by many output columns at once.

This repository holds synthesizable SystemVerilog for that engine. The
architecture is parameterised in the same four variables as the design space
it comes from:

| parameter | meaning | default |
|---|---|---|
| `MU` (μ) | LUT group size: activations per LUT | 3 |
| `L` | number of LUTs (input tile height n = L·μ) | 11 (n = 33) |
| `K` | read-out ports per LUT = output columns (tile width m = K) | 32 |
| `DTYPE` / `W` | activation and adder type: `DT_FP16` (binary16) or `DT_INT` (W-bit) | FP16 |

The defaults are the 32 × 32 FP16 configuration with μ = 3. That point has the
lowest area of the μ sweep for that tile: about 0.12 mm² in a 16 nm process,
against 0.197 mm² for a sign-flip datapath and 0.268 mm² for a dequantise-and-
multiply datapath. μ = 3 does not divide 32, so the default uses 11 LUTs,
which gives an input tile of 33. Each cycle the engine consumes one n × m tile
of the weight matrix, i.e. n·m = 1056 ternary multiply-accumulates per cycle.

## 1. Data flow

```
 act_tile (n = L·μ values) ──> lut[0..L-1] ── entries ──┐
                                  (build)                v
 wkey_tile (L × K keys) ──> weight_buffer ── keys ──> fac_column[0..K-1] ──> out_acc[0..K-1] ──> out_data[K]
                              (delay μ)                  (L FACs + adder tree)   (accumulate)
 in_valid, num_tiles ──> controller ── valid/first/last flags, LAT stages ──> acc_valid/acc_first, out_valid
```

The engine computes `y = W·x` for a weight matrix of R rows (the reduction
dimension) and K columns. The host cuts `x` into R/n input tiles. It streams
each input tile together with the n × K weight tile it multiplies, one pair per
cycle. These are the two phases of the computation:

* **Build phase** (`lut`). Each of the L LUTs takes its μ activations. A
  pipelined adder network forms the (3^μ−1)/2 signed sums whose first
  non-zero weight is +1. They are stored in the LUT entry register.
* **Fetch and accumulate phase** (`fac`, `fac_column`, `out_acc`). Output
  column k has one FAC (fetch-and-accumulate) unit per LUT. A FAC uses its
  weight key to select an entry and negates it when the key says so. The L
  values of a column are summed by a reduction tree. That sum is added into
  the column's output register.

The design is output stationary: the K output registers stay in place while
all R/n tiles stream past. After the last tile, `out_valid` pulses for one
cycle. The results stay on `out_data` until the first tile of the next GEMV
reaches the accumulators. The next GEMV can start on the very next cycle,
without a clear cycle.

The weight matrix is streamed and never reused, so each input tile's LUTs are
used for exactly one weight tile. The reuse that pays for a LUT is spatial:
K = 32 read-out ports share each table.

## 2. The LUT and its index order

The heart of the design is how a group of μ ternary weights maps to a stored
sum. The sums are numbered in base 3, with the first activation of the group
(A) as the most significant digit. Each weight is coded as a digit: +1 → 0,
0 → 1, −1 → 2. For μ = 3:

| index | A | B | C | | index | A | B | C |
|---|---|---|---|---|---|---|---|---|
| 0 | + | + | + | | 7 | + | − | 0 |
| 1 | + | + | 0 | | 8 | + | − | − |
| 2 | + | + | − | | 9 | 0 | + | + |
| 3 | + | 0 | + | | 10 | 0 | + | 0 |
| 4 | + | 0 | 0 | | 11 | 0 | + | − |
| 5 | + | 0 | − | | 12 | 0 | 0 | + |
| 6 | + | − | + | | 13 | 0 | 0 | 0 |

Indices 14 to 26 mirror this list: index i is the negation of index 26 − i.
In this order the first (3^μ−1)/2 indices are exactly the groups whose leading
non-zero weight is +1. Three reductions then shape the hardware:

* **Symmetry.** Only indices 0 … (3^μ−1)/2 − 1 are stored, 13 for μ = 3. A
  mirrored group is read as the negation of its partner. For FP16 this is a
  sign-bit flip; for integers it is a two's-complement negate.
* **Redundancy.** The network adds one activation per pipeline level. Level j
  holds the positive-half sums of the first j activations. Each level-(j+1)
  entry extends one level-j entry p by the new activation X: `p + X`, `p`, or
  `p + (−X)`. So a shared prefix such as A+B is computed once and reused by
  A+B+C, A+B and A+B−C.
* **Sparsity.** A zero weight costs no adder: `p` is passed on as is. The one
  entry whose prefix is all zero is X itself.

Level j+1 therefore needs 3^j − 1 adders. That makes 10 adders per LUT for
μ = 3 and 36 for μ = 4. The same table built naively would need (μ−1)(3^μ−1)
adders: 52 and 240. (The analytical bound on the optimised count, (μ−1)(3^μ−1)/2
− R(μ) − μ·S(μ), gives 44 for μ = 4.)

In the FP16 build, each entry is rounded after every addition, in the order of
the index digits. For example, entry 2 is `round(round(A+B) + (−C))`. The
testbench reference uses this order too.

### Weight keys

The weights are encoded offline, in software, into one key per group: `{sym,
sel}` of `KEY_W = SEL_W + 1` bits.

* For a group with base-3 index t < (3^μ−1)/2: sym = 0 and sel = t.
* For the all-zero group, t = (3^μ−1)/2: sym = 0 and sel = (3^μ−1)/2. The
  Fetch MUX outputs +0 for this select value.
* For a mirrored group, t > (3^μ−1)/2: sym = 1 and sel = 3^μ − 1 − t.

`SEL_W = clog2((3^μ−1)/2 + 1)`. For μ = 3 the key has 5 bits, or 1.67 bits per
weight; for μ = 5 it has 8 bits, or 1.6 bits per weight. This is the width
ceil(log2((3^μ−1)/2)) + 1 for μ ≥ 3. For μ = 2 and μ = 1 that formula is one
bit too narrow to tell all 3^μ groups apart, so one more bit is used.
`lut_pkg::encode_group` implements the encoding. Testbenches use it, and a
host flow can use it as the specification.

## 3. Pipeline and timing

All stages are registered, and the engine accepts a tile every cycle. There
is no back-pressure. `in_valid` may drop for any number of cycles, and every
stage register loads only when its stage holds valid data.

| stage | cycles | registers |
|---|---|---|
| LUT build (`lut`) | μ | input register, then one per adder level; the last one is the LUT entry register |
| weight delay (`weight_buffer`) | μ | the weight tile register, then a delay that keeps the keys beside their entries |
| FAC read-out (`fac_column`) | 1 | FAC outputs |
| reduction tree (`fac_column`) | clog2(L) | one per tree level |
| accumulation (`out_acc`) | 1 | output register |

`LAT = μ + 1 + clog2(L)` is 8 for the defaults. If a GEMV's last tile is
sampled at clock edge t, the accumulators take its sum at edge t + LAT. At
that same edge `out_valid` rises, and it falls one cycle later. A GEMV of T
tiles therefore takes T cycles of input plus LAT cycles of drain. GEMVs
overlap fully.

The controller samples `num_tiles` with each GEMV's first tile. It counts the
tiles (`tile_idx` shows the index of the next tile expected) and marks the
first and the last one. It carries the {valid, first, last} flags down an
LAT-deep shift register. Assertions check that these flags stay aligned with
the datapath's own valid bits. `num_tiles` = 0 is illegal, and an assertion
flags it.

The reduction tree pairs neighbours: (0+1), (2+3), …; an odd last operand moves
up one level unchanged. For FP16 the order of additions is visible in the
rounding, and it is fixed and documented for that reason.

## 4. Arithmetic

`act_add` is the one scalar adder used everywhere: 10 adders per LUT for μ = 3,
L − 1 per column in the tree, and one per accumulator.

* **FP16** (`fp16_add`). IEEE-754 binary16 addition in one combinational
  stage. It rounds to nearest, ties to even. It supports subnormals and
  overflows to infinity. A NaN operand, or inf − inf, gives the quiet NaN
  0x7E00. Exact cancellation gives +0. Negation is a sign-bit flip.
* **INT** (`DT_INT`). W-bit two's complement that wraps modulo 2^W. No
  accumulator widening is done, so the sums, the LUT entries and the
  accumulators are all W bits wide. A user who wants INT8 inputs with wider
  accumulation can instantiate `DT_INT` with a larger `W` and sign-extend the
  activations.

The per-group sign inversion is cheap in FP16 but costs an incrementer in
INT. This is why large K (many read-outs per LUT) pays off for FP16, and more
LUTs with fewer read-outs pay off for INT8.

## 5. Interface of `lut_gemv_core`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid` | in | 1 | a tile is presented this cycle |
| `act_tile` | in | n × W | input tile; LUT l takes `act_tile[l·μ +: μ]`, and element l·μ is its term A |
| `wkey_tile` | in | L × K × KEY_W | keys; `wkey_tile[l][k]` encodes the weights of rows l·μ … l·μ+μ−1 of column k |
| `num_tiles` | in | 16 | tiles in this GEMV (sampled with the first tile) |
| `out_valid` | out | 1 | one-cycle pulse: `out_data` holds a finished GEMV |
| `out_data` | out | K × W | `out_data[k]` = Σ over rows of weight·activation for column k |
| `tile_idx` | out | 16 | index of the next tile within the current GEMV |

If the reduction length is not a multiple of n, pad the activations with
anything and the weights with zero groups.

## 6. Files

`rtl/` (one unit per file):

* `lut_pkg.sv`: data-type enum, sizing functions, `encode_group`
* `fp16_add.sv`: binary16 adder
* `act_add.sv`, `act_neg.sv`: adder and negation of the configured type
* `lut.sv`: LUT build network and entry register
* `fac.sv`: Fetch MUX, inverter, Inv. MUX
* `fac_column.sv`: L FACs and the pipelined reduction tree of one column
* `out_acc.sv`: output accumulator register
* `weight_buffer.sv`: weight tile register and alignment delay
* `controller.sv`: tile counting and the flag pipeline
* `lut_gemv_core.sv`: top level

`tb/`: a self-checking testbench per unit (`tb_<unit>.sv`), plus:

* `tb_lut_gemv_core.sv`: the full core at default parameters. It runs eight
  back-to-back GEMVs of 1 to 6 tiles with bubbles, and checks every output
  word and the exact result cycle. It also counts the mechanisms exercised:
  mirrored reads, zero groups, bubbles, single- and multi-tile GEMVs, and
  overlapping GEMVs.
* `tb_workloads.sv`: the same end-to-end check in five other configurations.
  Three are INT8: L = 34, μ = 2, K = 30; L = 26, μ = 2, K = 23; and a 32 × 32
  tile with μ = 4. Two are FP16: μ = 1 with an 8 × 8 tile, and μ = 5.
* `tb_bitnet_gemv.sv`: the default core on GEMVs of 262 tiles. That is the
  8640-long reduction of the FFN down-projection of a 3B-parameter BitNet
  b1.58 model; each GEMV computes one 32-column slice of the outputs.
* `tb_ref_pkg.sv`: the reference arithmetic. FP16 is computed through
  `real`, which is exact for a single add, and rounded back to binary16 by
  arithmetic. It shares no code with the RTL adder.
* `tb_core_checker.sv`, `tb_core_inst.sv`, `tb_*_harness.sv`: stimulus and
  scoreboards shared by the testbenches above.

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. To
simulate with Verilator 5 (two-state; initialise everything that is read):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/lut_pkg.sv tb/tb_ref_pkg.sv tb/tb_lut_gemv_core.sv --top-module tb_lut_gemv_core
./obj_dir/Vtb_lut_gemv_core
```

For a different configuration, override `DTYPE`, `W`, `MU`, `L` and `K` on
`lut_gemv_core`. `tb_core_inst` shows how, and its checker adapts to them. The
default full core builds in about 15 s and simulates in well under a second.

## 7. How far it is verified

* **Adder.** The FP16 adder is compared bit for bit with an independent
  reference. The test covers 20,000 random operand pairs, a third of them
  close-magnitude cancellations. Hand-picked cases add signed zeros, ties,
  subnormals, overflow, infinities and NaN.
* **Units.** Every unit has its own testbench with randomised streams and
  bubbles. The LUT is tested for μ = 1, 3 and 4, the FAC for FP16 μ = 3 and
  INT8 μ = 2, and the column for L = 11 and 6. Each pipelined unit's latency
  is checked cycle by cycle.
* **Whole core.** The core is checked at its defaults and in five other
  configurations. Every output word and the exact cycle of every result are
  compared with a model that follows the same rounding order.
* **Not covered.** The FP16 stimulus uses magnitudes between 2^−6 and 4, so
  infinities and NaN never travel through the whole core. No timing or area
  figure comes with this RTL: the single-cycle FP16 adder would have to be
  pipelined to reach clock rates in the 500 MHz class.

## 8. Where this RTL departs from or adds to the source architecture

The architecture fixes the block structure, the three LUT reductions, the
FAC structure, the key format and the output-stationary accumulation. The
following are this implementation's own choices:

* **Tile size.** L = 11 (n = 33) in place of a 32-row tile, since 32 is not a
  multiple of 3.
* **Reduction within a column.** The column is summed by a balanced pairwise
  tree, as the architecture's text says. Its block diagram draws an adder in
  each FAC fed from the FAC above, which could be read as a chain.
* **Pipeline.** The stage boundaries are listed in §3. The source only says
  the build network is fully pipelined.
* **Keys.** The all-zero group uses select value (3^μ−1)/2. The key is one bit
  wider for μ ≤ 2 (see §2).
* **Controller.** Its protocol is this design's own: valid-only, no
  back-pressure, `num_tiles` sampled with the first tile, load-on-first
  accumulation, and a one-cycle `out_valid` pulse. The source only names a
  controller.
* **FP16 adder.** The source uses an external floating-point library. This
  adder is a from-scratch single-cycle implementation, and a real
  500 MHz-class implementation would pipeline it.
* **INT arithmetic.** It wraps at W bits (see §4).
* **Not built.** The LUTs are never reused over time. Batched GEMM, which
  would keep a LUT and feed it several weight tiles against several
  accumulator sets, is not built. Neither is any memory system around the
  core: weight and activation storage, DMA and host interface are outside
  this RTL.
* **Configuration count.** One of the reference configurations is listed
  with a throughput of 1334 multiplies per cycle for L = 26, μ = 2, K = 23. The
  product L·μ·K is 1196, and the testbench uses the listed L, μ and K.
