# FIGLUT-I: a look-up-table GEMM engine for FP16 activations and binary-coded weights

Large language models are often deployed with weight-only quantization: the
weights are stored with 2 to 4 bits (sometimes 8), while the activations stay
in floating point. The matrix products then mix FP activations with integer
weights. Most hardware handles that by converting the weights back to floating
point first.

This design computes those products without any multiplier in the array. The
weights are written in binary-coding quantization (BCQ), as a sum of
sign-matrices `B_i ∈ {-1,+1}` with scale factors:

```
w = Σ_{i=1..q} α_i · b_i + z
y = Σ_i α_i · (B_i · x) + z · Σ_n x_n
```

One bit plane `B_i · x` needs only additions and subtractions of activations.
Take a group of μ = 4 activations. Whatever the four weight bits are, the
partial result is one of only 16 signed sums `±x0 ±x1 ±x2 ±x3`. The engine
computes those sums once per token and keeps them in a small flip-flop table.
Many read-accumulate units (RACs) then use their 4-bit weight pattern as a key
into the table and add the entry they read to a running partial sum. One table
read replaces three additions. Because the table is made of plain flip-flops
behind multiplexers, any number of RACs can read it in the same cycle. There
are no banks, so no reader ever waits on another (no bank conflicts).

The RTL here is the integer variant ("FIGLUT-I"). Activations are pre-aligned
to a shared exponent, so LUT generation and accumulation inside the array are
integer additions. Scaling and accumulation across planes and tiles are FP32.

## 1. The table and its key

A key bit of 1 means weight +1, a 0 means −1. The key's MSB belongs to the
first activation of the group. For μ = 4 the full table would have 16 entries.
The entries come in pairs of opposite sign: `T[k] = −T[~k]`. So only the 8
entries with `+x0` are stored (the *half* table, hFFLUT). The RAC decodes the
key like this:

```
index  = key[3] ? key[2:0] : ~key[2:0]
value  = key[3] ? H[index] : -H[index]
H[j]   = x0 + (j[2] ? x1 : -x1) + (j[1] ? x2 : -x2) + (j[0] ? x3 : -x3)
```

| key  | weights       | value read       |
|------|---------------|------------------|
| 1111 | + + + +       | H[7]             |
| 1000 | + − − −       | H[0]             |
| 0111 | − + + +       | −H[0]            |
| 0000 | − − − −       | −H[7]            |

The generator (`lut_gen`) builds H with a two-level adder tree:

- level 1 forms the two upper-pair sums `x0 ± x1`;
- level 1 also forms the four lower-pair sums `±x2 ± x3`;
- level 2 adds one of each for every entry.

That is 2 + 4 + 8 = 14 additions per table. The table serves 32 RACs per PE
and 4 PEs down its column, which replaces 3 additions for each of them.

## 2. Number path

| stage | format | notes |
|---|---|---|
| input buffer | FP16 | one word = 32 activations of one token for one reduction tile |
| `fp16_prealign` | 16-bit signed integer + shared 5-bit exponent | sign, 11-bit significand, 4 guard bits; shifted right to the largest exponent of the 32 values, truncated |
| LUT entries | 18-bit signed | exact sums of 4 values |
| RAC partial sums | 21-bit signed | exact sum over the 8 PEs of a row (32 activations) |
| `fxp_scale` | FP32 | integer × FP16 α (or z), exact product, truncated to 24 bits |
| `fp32_add` | FP32 | accumulation over planes and reduction tiles, truncating |

An aligned integer `a` stands for `a · 2^(emax − 15 − 10 − 4)`. Pre-alignment
is the only lossy step before FP32. Each activation loses less than one unit
of `2^(emax−29)`, where emax is the largest exponent among the 32 activations
of its tile. So a value 2^15 times smaller than the tile maximum vanishes
entirely. The testbenches check every output against a real-valued reference
with the bound that follows from this: `(Σ|α| + |z|) · 32 · 2^(emax−29)` per
tile, plus a few FP32 ulps.

FP16 subnormals are accepted (exponent 1). Inf and NaN are not handled
anywhere.

## 3. The PE array (`mpu`)

```
             token (32 aligned activations), 1 per cycle
               | skew 0   | skew 1   ...   | skew 7      (input skew registers)
            [LUT gen]  [LUT gen]  ...   [LUT gen]        one per column, 4 activations each
               v          v                v
 keys ->    [ PE 0,0 ]->[ PE 0,1 ]-> ... ->[ PE 0,7 ]--> de-skew 3 --\
               v (table moves down one row per cycle)                 |
 keys ->    [ PE 1,0 ]->[ PE 1,1 ]-> ... ->[ PE 1,7 ]--> de-skew 2 ---+--> 128 sums
               v                                                      |    per token
            [ PE 2,* ] ...                               de-skew 1 ---|
            [ PE 3,* ] ...                               de-skew 0 --/
```

- **PE**: one hFFLUT (8 × 18-bit flip-flops with an enable) and K = 32 RACs.
  All 32 RACs read the PE's table in the same cycle. RAC `j` of row `r` works
  on output `r·32 + j`. The table is registered and handed to the PE below,
  which uses it one cycle later.
- **Reduction**: column `c` handles activations `4c .. 4c+3` of the tile. A
  partial sum enters column 0 as zero and picks up one table read per column.
  So 8 columns × 4 activations make a reduction tile of 32 inputs. Row `r`
  produces 32 outputs, and the array produces 4 × 32 = 128 outputs per tile.
- **Skew**: column `c` sees a token `c` cycles late, matching the partial sum
  coming from the left (at most 7 stages). Row `r` finishes `r` cycles after
  row 0. The rows are delayed `3 − r` cycles so that all 128 sums of a token
  leave together.
- **Latency**: LAT = COLS + ROWS = 12 cycles from `in_valid` to `out_valid`.
  The array accepts one token per cycle, which is 4096 binary weights per
  cycle (1024 table reads).
- **Weights are stationary.** Each RAC holds a 4-bit key. Keys are loaded
  through a shift chain along each row: while `key_shift` is high, one
  512-bit weight word enters column 0 of all rows. A tile is loaded with 8
  shifts, the word for column 7 first. Keys must not move while tokens are in
  flight.

## 4. Scale, offset and accumulation

Row sums come out of the array as integers for one bit plane. For each of the
128 lanes, `scale_acc` computes:

```
acc[t] = (first ? 0 : acc[t]) + α[lane,plane,tile] · psum · 2^(e−29) + (last plane of tile ? off : 0)
```

`acc` lives in the partial-sum buffer, one 4096-bit word (128 × FP32) per
token. The update is a two-stage read-modify-write:

- cycle 0 scales and issues the read;
- cycle 1 adds and writes back.

On the last plane of the last reduction tile, the result also goes to the
output buffer.

`offset_unit` forms the offset term. It adds the 32 aligned activations of
the token (exact, since they share one exponent), delays the sum by LAT, and
multiplies it by each lane's FP16 `z`. It is added once per reduction tile,
on that tile's last plane.

Uniform INT-q quantization `w = s·(c − zp)` with an unsigned code `c` maps
onto this form exactly:

- `α_i = s · 2^(i−2)` for i = 1..q;
- `z = s · ((2^q − 1)/2 − zp)`.

Non-uniform BCQ simply uses its own α and z = 0.

## 5. Sequencing (`figlut_ctrl`)

An operation multiplies an `(n_mt·128) × (n_kt·32)` weight matrix with q bit
planes by `n_tok` tokens. The loops, from innermost out:

1. tokens — one per cycle through a stationary tile;
2. bit plane — the next plane of the same tile;
3. reduction tile;
4. output tile.

For each (output tile, reduction tile, plane) the controller runs three
phases:

| phase | cycles | what happens |
|---|---|---|
| LOAD | COLS + 1 = 9 | read 8 weight words and shift them in; read α and z of the tile |
| STREAM | n_tok | one input-buffer read and one tagged token per cycle |
| DRAIN | LAT + 4 = 16 | wait until the last token has left the array and the accumulator |

`done` pulses after exactly `1 + n_mt·n_kt·q·(9 + n_tok + 16)` cycles from
`start`. For 128 tokens the array therefore streams 84 % of the time. The
precision `q` (1..8) is a runtime input, so the same hardware runs Q1 to Q8
and per-layer mixed precision. Run time is proportional to q.

## 6. Host interface and buffer maps (`figlut_top`)

All buffers are 1-read/1-write synchronous arrays (`sram_1r1w`). The host
fills them through write ports, pulses `start` with
`cfg_q, cfg_kt, cfg_mt, cfg_tok`, waits for `done`, and reads the output
buffer. Read data comes one cycle after `ob_re`.

| buffer | address | word |
|---|---|---|
| input | `kt·T_MAX + t` | 32 × FP16; lane n = input `kt·32 + n` |
| weight | `((mt·KT_MAX + kt)·Q_MAX + i)·8 + c` | 128 × 4-bit keys; key of output `mt·128 + r·32 + j` at bits `(r·32+j)·4`, key MSB = input `kt·32 + 4c` |
| scale (α) | `(mt·KT_MAX + kt)·Q_MAX + i` | 128 × FP16 |
| offset (z) | `mt·KT_MAX + kt` | 128 × FP16 |
| output | `mt·T_MAX + t` | 128 × FP32 |
| partial sum | `t` | 128 × FP32 (internal) |

The default capacities hold a 1024 × 1024 layer with up to 8 bit planes and
128 tokens:

| parameter | value |
|---|---|
| T_MAX | 128 |
| KT_MAX | 32 |
| MT_MAX | 8 |
| Q_MAX | 8 |

That comes to about 20 Mbit of buffers. Larger layers can be split along the
output dimension into several operations. Splitting along the reduction
dimension would need the partial outputs to be added outside the design.

## 7. What follows the paper and what is this design's own

Taken from the paper:

- the LUT-based method with μ = 4 and k = 32 RACs per shared table;
- the flip-flop table read through multiplexers;
- the half-size table with MSB-controlled index and sign flip;
- the 14-adder two-step generator;
- the 8 × 4 PE array with generators on top, tables passed down and partial
  sums passed along rows;
- weight-stationary dataflow with the plane-then-tile fetch order;
- FP16 activations with pre-alignment and FP32 accumulation;
- scaling by α per plane and a final offset.

Chosen here, where the paper gives no detail:

- **Array orientation**: 4 rows × 8 columns. This was inferred from the
  paper's statement that at most 7 input skew stages are needed.
- **Alignment group**: 32 activations (one token, one reduction tile). The
  alignment width is 4 guard bits, and the integer paths truncate.
- **Scale factors**: α and z are FP16, one per output, per plane (α) and per
  reduction tile.
- **FP32 arithmetic**: truncating adders and scalers written here. The
  original used vendor floating-point units.
- **Key loading**: a shift chain, single-buffered. Loading and draining are
  not overlapped with streaming, which costs 25 cycles per tile and plane.
- **Output de-skew** and the exact offset sum on the aligned integers.
- **Buffers**: sizes, address maps, the host port interface, the start/done
  handshake, and synchronous active-low reset.

Not built:

- the floating-point variant (FP16 tables and FP RACs without pre-alignment);
- BF16 and FP32 activation formats;
- the off-chip DRAM and whatever loads the buffers from it.

## 8. Simulating

Every file in `rtl/` holds one module or package; `figlut_pkg.sv` must be read
first. Testbenches are in `tb/` and use `tb/tb_fp_pkg.sv`; each prints
`TB_RESULT checks=N failures=M`. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/figlut_pkg.sv tb/tb_fp_pkg.sv $(ls rtl/*.sv | grep -v figlut_pkg) \
  tb/tb_figlut_top.sv --top-module tb_figlut_top -Mdir obj_top
./obj_top/Vtb_figlut_top
```

| testbench | checks |
|---|---|
| `tb_fp16_prealign` | shared exponent; every aligned value within one LSB below the input, sign kept; zeros and subnormals |
| `tb_lut_gen` | all 8 entries against direct signed sums, including extreme inputs |
| `tb_hfflut` | reset, load under enable, hold, enable forwarding |
| `tb_rac` | all 16 keys, including the sign-flipped half, against `Σ ±x`; key shifting |
| `tb_pe` | 32 RACs on one table; the table is used one cycle after loading and forwarded down |
| `tb_mpu` | full 4 × 8 × 32 array: every output lane against the signed dot product; latency exactly 12; one token per cycle; gaps |
| `tb_offset_unit` | `z · Σx` per lane, in step with the array |
| `tb_scale_acc` | FP32 scale and accumulation over planes and tiles against reals; offset on the last plane; no leak between operations |
| `tb_sram_1r1w` | random traffic against a model; read-during-write returns old data |
| `tb_figlut_ctrl` | the full LOAD/STREAM/DRAIN sequence, addresses, tags, exact cycle count, precision change |
| `tb_figlut_top` | end to end at reduced size (K = 4, small buffers), four operations with q = 3, 1, 4, 2 |
| `tb_figlut_full` | end to end with every parameter at its default: two operations (q = 3 over 2 × 2 tiles and 16 tokens, then q = 8) |
| `tb_workload_gemm` | the paper's energy workload with every parameter at its default: a 1024 × 1024 weight matrix times 1024 × 128 FP16 activations, at Q4, Q3 and Q2; all 131 072 outputs of each operation checked |

The end-to-end benches also check the cycle count of each operation. They
count how often each mechanism occurred and fail if one never did:

- tile loads;
- plane, reduction-tile and output-tile switches;
- sign-flipped table reads;
- offset additions;
- accumulator read-modify-writes;
- back-to-back tokens;
- precision changes.

`tb_figlut_full` builds and runs in under two minutes, `tb_workload_gemm` in about three.

To change the design's size, override the parameters of `figlut_top`:

- `R`, `C` and `K` set the array;
- `T_MX`, `KT_MX`, `MT_MX` and `Q_MX` set the buffers.

μ is fixed at 4 by the generator's structure.
