# Mugi node: one value-level-parallel array for LLM nonlinear functions and BF16 x INT4 GEMM

## The idea

A multiplier is expensive; a comparator and an AND gate are not. *Value-level parallelism*
(VLP) replaces multiplication by a small, known set of operand values with **time**:

* A **counter** sweeps the possible values of a short operand, one value per cycle.
* A **temporal converter** (an equality comparator) in each row fires a one-cycle *spike*
  when the counter equals that row's operand. The operand's value is now encoded as the
  spike's arrival time.
* A **column** carries, in the same cycle, the result that belongs to the counter's value
  (for example `c * x` in cycle `c`). The result was computed once and is *reused* by every
  row whose operand equals `c`.
* A row picks the column value with an **AND gate** while its spike is present. This is
  *temporal subscription*. Because only one spike is in a row at a time, the picked values
  leave the row through an **OR tree**.

This design applies the trick twice over one array:

* **Nonlinear functions** (softmax's `exp`, SiLU, GELU). A BF16 input is reduced to a sign,
  a 3-bit rounded mantissa and an exponent. The columns carry a row of a pre-computed
  lookup table (LUT), one row per mantissa value. A row's mantissa spike picks the LUT row
  of its own mantissa. A second temporal selection, by exponent, then picks the right entry
  of that row. The LUT output *is* the function value, so `f(x)` needs no arithmetic.
* **GEMM with 4-bit weights and BF16 activations.** Each row holds one INT4 weight, stored
  sign-magnitude. Column `j` holds one BF16 activation `x_j`, and an accumulator emits
  `c*x_j` in sweep cycle `c`. A row whose weight magnitude is `c` picks `c*x_j` for every
  column `j`; its sign is then applied. FP32 accumulators add these up over K steps,
  output-stationary.

One node is an array of **H = 256 rows x W = 8 columns**. There are eight columns because a
3-bit magnitude has eight values, so one sweep is 8 cycles long. The node also has three
64 KB SRAMs, its operand and result buffers, and a small vector multiplier. The vector
multiplier is used for dequantisation scales and for the softmax division.

## Block map

```
                 counter (CNT) ──────────────┐ broadcast down every column
 iSRAM (LUT rows | BF16 activations)         │
   └─> SW (8-entry window) ─> iFIFO (stagger column j by j) ─> iAcc (c*x, GEMM) ─> columns
 oSRAM (NL inputs) ─> M-proc ─┐
 wSRAM (INT4 weights) ────────┴─> wFIFO stage (8 lines) ─> active operands ─> TC per row
                                      └─> E-proc (window, exponent index, specials)
 row r:  TC ─> PE0 ─> PE1 ─> ... ─> PE7      (T register pipelines the spike across columns)
                  AND      AND          AND   (subscribe the column value)
         two OR sets (one per mapping phase) ─> register + sign conversion (SC)
                 ─> PP (exponent selection, special values)   [nonlinear]
                 ─> oAcc (FP32: 8 partial sums, or a row sum)  [GEMM / softmax sum]
 all rows ─> oFIFO ─> Vec (per-row scale) ─> oSRAM
 controller: command decode, loader, mapping starts, sweep counter, event pipeline, drains
```

| RTL module | Role |
|---|---|
| `mugi_pkg` | sizes, BF16/FP32 types and arithmetic functions, operand and command structs |
| `mugi_sram` | 1-write 1-read SRAM, registered read; used for iSRAM, wSRAM and oSRAM |
| `m_proc` | BF16 to {sign, 3-bit rounded mantissa, exponent, class} |
| `e_proc` | window placement for a mapping; per-row exponent index and special-value code |
| `sw` | picks 8 consecutive exponent entries of a LUT row |
| `ififo` | delays column `j` by `j` cycles |
| `iacc` | per column: `c*x` in sweep cycle `c` (GEMM), registered pass-through (nonlinear) |
| `tc` | temporal converter: counter equals operand, giving a spike with phase and sign |
| `pe` | T register (spike, phase, sign) and the AND subscription |
| `vlp_row`, `vlp_array` | a row of 8 PEs with two OR sets, output register and SC; H rows |
| `pp` | exponent selection per row and phase, or the special value |
| `oacc` | two FP32 adders per row: 8 GEMM partial sums, or the softmax row sum |
| `ofifo` | holds one finished result set and drains it one oSRAM line per cycle |
| `vec` | multiplies each lane by its row's scale (or by a reciprocal loaded earlier) |
| `wfifo` | stages the next mapping's H row operands while the current one runs |
| `mugi_ctrl` | the controller and counter |
| `mugi_top` | one node with host ports to the three SRAMs |

## Nonlinear mode in detail

### Input split (M-proc)

`x` is BF16: sign `s`, 8-bit exponent, 7-bit fraction. Only the top 3 bits of the fraction
are kept, rounded half-up on the 4th bit. If rounding overflows (`.111|1...`), the mantissa
becomes 0 and the exponent goes up by one. The value used is `(-1)^s * (1 + m/8) * 2^e`
with `m` in 0..7. Zero, infinity and NaN inputs are classified and handled by PP.

### The LUT in iSRAM

An iSRAM line is 256 bits, which is 16 BF16 entries. LUT row `m` (address `i_addr + m`)
holds, in entry `k`:

    LUT[m][k] = f( (1 + m/8) * 2^(lut_e0 + k) ),   k = 0 .. lut_ne-1   (lut_ne <= 16)

For functions of inputs of both signs (SiLU, GELU) the table has 16 rows. Row `{s,m}`
holds `f((-1)^s (1 + m/8) 2^(lut_e0+k))`. For softmax the inputs are `x - max(x) <= 0`, so
the table stores `exp(-(1 + m/8) 2^(lut_e0+k))` with the sign implied. `lut_e0` and
`lut_ne` are fields of the command, so each layer can use its own stored exponent range
(the range that keeps a model's accuracy is found by profiling, and differs between layers). The tests use `lut_e0 = -6, lut_ne = 12`, which covers
|x| in [2^-6, 2^6).

### The window (E-proc, SW)

The array has only 8 columns, so only 8 of the row's exponents are in flight. E-proc looks
at all H inputs of the mapping and places an 8-exponent window:

* `win_max = 1`: the window ends at the largest exponent. Use this for softmax, where large
  magnitudes dominate.
* `win_max = 0`: the window starts at the smallest exponent.

In both cases the window is clamped inside the stored LUT range. Each row then gets an
index `d = e - window_low`. Out-of-range indexes follow these rules:

| case | softmax | SiLU / GELU |
|---|---|---|
| `d < 0` (underflow) or input zero | index 0 (`exp` of a tiny value) | result 0 |
| `d > 7` (overflow) | index 7 (largest stored magnitude) | positive: `x` passed through; negative: 0 |
| +/- infinity | 0 | +INF gives +INF; -INF gives 0 |
| NaN | NaN | NaN |

SW shifts the LUT row by the window offset, so column `j` carries entry `window_low + j`.

### Two temporal selections

The counter runs `c = 0..7` (or 0..15 in signed mode, over `{s,m}`). In cycle `c` the
columns carry LUT row `c`, staggered by the iFIFO so that column `j` shows it `j` cycles
later. A row whose mantissa is `c` spikes in cycle `c`. The spike walks one PE per cycle,
so each PE sees exactly the LUT row that belongs to the row's mantissa. The row therefore
emits 8 *beats*, namely the 8 window entries of its own LUT row, on consecutive cycles.
PP keeps the beat whose column index equals the row's exponent index. The cycle of the
result is therefore "mantissa + exponent index" after the start of the sweep.

### Softmax

1. `OP_NL` with `nl_softmax = 1, wr_sum = 1`. This computes `exp` for all mappings. oAcc
   adds every row's results into a per-row FP32 sum as they arrive, and the sums are
   written as 8 oSRAM lines after the last mapping.
2. `OP_LDSCALE` with `recip = 1` on those 8 lines. This loads `1/sum` into the vector
   array's per-row registers.
3. `OP_VEC` over the `exp` lines. Each value is multiplied by its row's reciprocal in one
   cycle.

Subtracting the maximum from the inputs is *not* done by the node. It expects inputs that
are already `x - max`.

## GEMM mode in detail

* **Weights.** Weights go on the rows as INT4 sign-magnitude (bit 3 = sign, bits 2:0 =
  magnitude). One K step of H weights is 8 wSRAM lines of `H*4/8` bits. Line `g` holds rows
  `g*H/8 .. g*H/8 + H/8-1`, 4 bits each, lowest row in the lowest bits.
* **Activations.** Activations go on the columns: one iSRAM line per K step, with
  activation `j` in bits `16j +: 16` (8 tokens or 8 grouped query heads).
* **Products.** iAcc holds `x_j` and a count. In sweep cycle `c` it outputs `c * x_j`,
  formed exactly and rounded once to BF16, which is what repeated addition would give. A
  row with magnitude `c` spikes at `c` and picks `c*x_j` from every column. SC XORs the
  weight sign into the BF16 sign.
* **Accumulation.** oAcc adds beat `j` to partial sum `j` of its row (FP32). The first K step
  overwrites the sum. On the last step the sums are rounded to BF16 and handed to the oFIFO.
* **Tiling.** A command runs `tiles x n` steps. Each tile uses the next `8n` weight lines and
  the same `n` activation lines, and writes 64 oSRAM lines at `dst_addr + 64*tile`. Those
  64 lines are 8 columns x 8 line groups of H/8 rows.
* **Dequantisation.** The optional `scale_en` multiplies each output row by the scale
  loaded with `OP_LDSCALE` (recip = 0) as the tile drains through the vector array.

## Timing: how two mappings share the array

A *mapping* is one sweep with one set of H row operands. Let `P` be 8 cycles (16 for
signed nonlinear functions) and let mapping start at cycle `S`:

| cycle | what happens |
|---|---|
| before `S` | the loader fills the wFIFO stage with 8 lines (M-proc sits between oSRAM and the stage) |
| `S` | stage full and array free: operands copied to the active set, E-proc result taken, phase bit flipped |
| `S+1+c` | counter value `c`, iSRAM read of LUT row / activation line, TC compare |
| `S+3` | exponent indexes, special codes and first/last flags loaded into the phase's PP / oAcc slot |
| `S+1+m+3+b` | beat `b` of a row with mantissa `m` leaves the row's output register |
| `S+P+11` | every beat of the mapping is out: results handed to the oFIFO |

The next mapping starts at `S+P`, while rows of the previous one are still emitting beats.
A row can hold a spike of each mapping at once. Every spike therefore carries a **phase
bit**, and each row has **two OR sets** with a one-entry output register each. PP and oAcc
keep a slot per phase. The result is one mapping every 8 cycles, with the array full.

**Stall.** The last GEMM step of a tile does not start while the oFIFO still holds the
previous tile or a hand-off is pending. The tile drain takes 64 cycles, so short-K GEMMs
stall. A nonlinear mapping drains only 8 lines, which fits in its 8-cycle slot.

## Commands

`cmd_t` in `mugi_pkg`. Raise `cmd_valid` for one cycle while `busy` is low. `done`
pulses once when all results are in oSRAM.

| op | fields used | effect |
|---|---|---|
| `OP_GEMM` | `n` (K steps), `tiles`, `w_addr`, `i_addr`, `dst_addr`, `scale_en` | `tiles` output tiles of H x 8 |
| `OP_NL` | `n` (mappings), `src_addr`, `i_addr` (LUT), `dst_addr`, `nl_signed`, `nl_softmax`, `win_max`, `wr_sum`, `sum_addr`, `lut_e0`, `lut_ne` | H results per mapping, 8 lines each at `dst_addr + 8k` |
| `OP_LDSCALE` | `src_addr`, `recip` | 8 lines into the per-row scale registers |
| `OP_VEC` | `n`, `src_addr`, `dst_addr`, `scale_en` | `n` lines scaled by row (line `l` belongs to row group `l mod 8`) |

oSRAM lines are `H*16` bits. Line `l` of a result set holds rows `(l mod 8)*H/8 ..` for
column `l/8`, one BF16 per lane. The host ports write all three SRAMs and read the oSRAM;
use them while the node is idle.

## Number formats

* BF16 everywhere on the data path; FP32 in oAcc; subnormals flush to zero.
* Rounding is to nearest, ties to even. The one exception is the 3-bit mantissa of
  M-proc, which rounds half up.
* The reciprocal in the vector array divides the 8-bit significand with guard and sticky
  bits and rounds correctly.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. Each one drives
random stimulus, compares the outputs with an independent real-number or cycle-level
model, and prints `TB_RESULT checks=N failures=M`. Useful ones:

* `tb_vlp_row` and `tb_vlp_array`: beat timing and content with two overlapping phases.
* `tb_mugi_ctrl`: the schedule above cycle by cycle, with models of the neighbouring
  blocks.
* `tb_mugi_top`: the whole node at its default size (H = 256, W = 8). It runs four
  operations on one node:
  * softmax `exp` over four mappings, with zero, -INF and NaN inputs and values outside the
    LUT, plus row sums;
  * the normalisation (reciprocal load and vector pass);
  * SiLU with both signs, including underflow, overflow and special values;
  * a two-tile GEMM with dequantisation that stalls.

  It checks every result against real arithmetic on its own LUT and checks the mapping
  periods. It counts each mechanism (stall, both OR sets busy, underflow, overflow,
  special value, pass-through, window shift, signed sweep, GEMM, nonlinear) and fails if
  one never occurs. It takes about 2 minutes to build and half a minute to run.

* `tb_mugi_ffn`: a feed-forward slice at the default size. It runs an up-projection GEMM
  (256 features x K = 16, 8 tokens, dequantised) and then GELU on the tile in place. The
  GEMM's column-by-column output layout is exactly the input layout of 8 nonlinear
  mappings. It checks every value bit-exactly against a model of the approximation, checks
  accuracy against GELU itself, and checks the 8- and 16-cycle mapping periods and the
  command latencies.

Run any of them with plain verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mugi_pkg.sv tb/tb_util_pkg.sv tb/tb_mugi_top.sv --top-module tb_mugi_top
./obj_dir/Vtb_mugi_top
```

Lint of the top at the default size reports only unused bits, one open output pin, and a
reset used by an assertion. The top's opening comment explains them.

## Where this design departs from or goes beyond the published description

* **Sign in the temporal converter.** One description drives the converter with sign and
  mantissa; another drives it with the mantissa only and leaves the sign to post-processing.
  Here GEMM and softmax use the 3-bit magnitude (8 cycles), and the sign goes to SC or is
  implied. Signed functions (SiLU, GELU) use a 16-cycle sweep over {sign, mantissa} against a
  LUT of twice the size. This matches the statement that such functions need a LUT twice as
  large. It also halves their throughput, which the published numbers may not assume.
* **Max subtraction for softmax** is left to whatever produces the inputs.
* **Output buffering.** The "small FIFO" behind the OR sets is one register per phase, and
  there is one oFIFO holding a single result set. Buffer depths are not given in the
  published description.
* **Double buffering of the memories** is by address: the host fills one region while
  commands use another. There is no separate bank switch.
* **Not built.** The mesh network joining nodes, inter-node accumulation, and the off-chip
  memory are not built. The node's SRAM ports are brought out instead. Attention heads and
  batch across rows, and the tiling of large GEMMs across nodes, are up to the software that
  issues commands.
* **Own choices.** These are not specified in the published description: the command
  format; the schedule constants (`S+3`, `S+P+11`); the LUT layout and the 16-entry row
  width; the FP32 oAcc with two adders per row; the exact `c*x` in iAcc; the
  clamping of the window into the stored LUT range; and round-half-up in M-proc.

## Sizes

| parameter | default | meaning |
|---|---|---|
| `ROWS` (`H`) | 256 | array height; H/8 values per oSRAM line, 8 lines per mapping |
| `COLS` (`W`) | 8 | array width; fixed by the 3-bit magnitude |
| `SRAM_BYTES` | 65536 | each of iSRAM, wSRAM, oSRAM |
| `LUT_MAXE` | 16 | exponents per LUT row (iSRAM line = 256 bits) |

H can be any multiple of 8; the published evaluation uses 128 and 256. At the default
size, one node holds, for example:

* a 256 x 512 INT4 weight tile (64 KB, all of wSRAM);
* a 4096-long softmax row (16.5 KB of oSRAM with results and sums);
* the 11008-wide SiLU of one Llama2-7B token (43 KB).

Whole models must stream from off-chip memory, which is outside this RTL.
