# AXELRAM: attention scores from quantized keys, with no dequantization

AXELRAM is a "smart SRAM" macro for the key half of an LLM's KV cache. Each key is quantized
once, on its way in, to 3-bit indices plus one FP16 norm. Attention scores are then computed
straight from those indices. No key is ever rebuilt, and the read side has no inverse transform.

Two facts make this work:

* **Rotation preserves inner products.** With an orthogonal `R`, `<q, k> = <Rq, Rk>`. Keys are
  stored in the rotated domain. So the query is rotated once, instead of un-rotating every
  stored key.
* **After rotation the codebook is fixed.** A random-sign Hadamard rotation spreads a unit
  vector evenly over its coordinates. Each coordinate is then close to `N(0, 1/d)`. The best
  scalar quantizer for that distribution (Lloyd-Max) depends only on `d` and `b`, never on the
  data, so it sits in a 30-byte ROM.

For one query, the per-key score `<q, k> ~= ||k|| * sum_i (Rq)_i * c[idx_i]` needs only table
lookups and additions. The `d * 2^b` products `(Rq)_i * c[j]` are computed once per query and
kept in a small table. Each key then costs `d` lookups, `d - 1` additions and one multiply by
its norm. For `d = 128`, `b = 3` and `T = 4096` keys, that is 1,024 + 4,096 = 5,120
multiplications per query. A datapath that dequantizes each key needs `T * d` = 524,288: 102.4
times more. The full-size testbench counts this and prints it.

This RTL follows the architecture of the AXELRAM paper (Nishida, "AXELRAM: Quantize Once,
Never Dequantize"). The paper gives the structure, the unit counts and the FP16 format. It gives
no interface, no control sequencing, no pipelining and no codebook values. Those are this
design's own choices, marked as such below and in each file's header.

## Data flow

```
 WRITE KEY (once per token)                      QUERY (once per query)
 cmd_vec k ──> norm_extractor ──> ||k||           cmd_vec q
                    │ k/||k||        │                │
                    v                │                v
             hadamard_rotator <──────┼──────── (same rotator) <── sign_rom[layer]
                    │ H·diag(s)·k̂    │                │ q_rot = H·diag(s)·q
                    v                │                v
         lloyd_max_quantizer <── codebook_rom ──> table_generator
                    │ d × b-bit      │  boundaries     │ P[i][j] = q_rot[i]·c[j]/d
                    v                v  centroids      v
              kv_sram row = {norm, idx[d-1:0]}     table_sram (d banks × 2^b)

 SCORE (per key, one per cycle)
 kv_sram read ──> table_sram lookup P[i][idx_i], all i at once ──> adder_tree (log2 d levels)
              ──> norm_multiplier (× ||k||) ──> score, score_addr
```

One `hadamard_rotator` serves both the write path and the query. Like the paper's figure, the
design shares it, and the top multiplexes its input by the operation in progress.

## Where the scale factors went

This is the part that is easiest to get wrong. The orthonormal rotation is
`R = H_d · diag(s) / sqrt(d)`. Here `H_d` is the ±1 Sylvester Hadamard matrix and `s` is the
layer's sign vector. Dividing by `sqrt(d)` (8·√2 for d = 128) would need a multiplier. So the
butterfly network computes `H_d · diag(s) · x` unscaled, and the constants in the codebook ROM
absorb the factor:

* **Write path.** The unit key `k̂` is rotated without scaling, so `v = sqrt(d) · R k̂`, and
  each coordinate of `v` is about `N(0, 1)`. Comparing `v_i` with the boundaries of `N(0, 1)`
  gives the same result as comparing `(R k̂)_i` with the boundaries of `N(0, 1/d)`. The ROM
  therefore stores the Lloyd-Max boundaries of the unit Gaussian.
* **Read path.** The query is also rotated unscaled: `u = H diag(s) q = sqrt(d) · Rq`. The
  true centroids are `c_j / sqrt(d)`, where `c_j` are the unit-Gaussian centroids. So
  `<Rq, ĉ[idx]> = sum_i u_i · c[idx_i] / d`. Because `d` is a power of two, `c_j / d` is exact:
  it is an exponent shift. The ROM stores `c_j / d`, and the table holds `P[i][j] = u_i · c_j / d`.
* The adder tree's sum is then `<q, k̂>`. One multiply by `||k||` gives the estimate of `<q, k>`.

The result is the paper's equation (1) exactly. The only multipliers are the `d` in the table
generator (used `2^b` times per query) and the single norm multiplier.

The codebook values are the classic Lloyd-Max levels of a unit Gaussian. For b = 3 the
centroids are ±0.2451, ±0.7560, ±1.3439, ±2.1519 and the boundaries are 0, ±0.5005, ±1.0500,
±1.7479; each value is rounded to FP16. Tables for b = 2 and b = 4 are included. The paper does
not print its values. Its solver works from the exact coordinate distribution for a given `d`,
so its numbers may differ from these in the later decimal places.

## Number format

Every datapath value is IEEE binary16 (`fp16_t` in `axelram_pkg`). The package functions
`fp16_add`, `fp16_mul`, `fp16_div`, `fp16_sqrt` and `fp16_gt` implement it with these rules:

* round to nearest, ties to even;
* subnormal inputs and results are flushed to signed zero;
* overflow saturates to infinity, and an all-ones exponent is read as infinity (no NaN).

These rules are this design's choice. The testbenches check all five functions bit for bit
against real-number arithmetic rounded to FP16.

The norm extractor keeps its sum of squares in FP16. Keys must therefore have `||k|| < 256`.
The paper's largest reported mean key norm is 172.

## Blocks

| module | does | from the paper | own choice |
|---|---|---|---|
| `norm_extractor` | `‖k‖` and `k/‖k‖` | function only | sequential: d cycles of square-and-add, one square root, d divisions (2d + 2 cycles) |
| `hadamard_rotator` | sign flip + FWHT | 7 stages, 448 add/sub, no multiplier | register after each stage; sign bit 1 means −1 |
| `lloyd_max_quantizer` | 7 comparators per coordinate → 3-bit index | 128 × 7 = 896 comparators | a tie goes to the lower index; output registered |
| `codebook_rom` | 8 centroids + 7 boundaries | 30 bytes, fixed | the values, the scaling above, one module for the two ROM boxes |
| `sign_rom` | one 128-bit sign vector per layer | d bits per layer, seed-derived or calibrated | xorshift32 default contents, a load port for calibrated vectors |
| `kv_sram` | `T` rows of `{norm, 128 × 3-bit}` (400 bits) | 384 bits + FP16 norm per key | a single-port array with registered read stands in for the 6T macro |
| `table_generator` | `P[i][j] = q_rot[i] · c[j]/d` | 1,024 products per query | 128 multipliers, one column per cycle |
| `table_sram` | 2 KB table with 128 parallel lookups | 1,024 × FP16, 128 parallel reads | 128 banks of 8 words |
| `adder_tree` | sum of 128 products | 7 levels, 127 adders | register after each level |
| `norm_multiplier` | sum × ‖k‖ | one multiply per key | registered |
| `axelram_macro` | top: commands, sequencing, score pipeline | the structure of the macro | the whole interface and control |

## Using the macro

The top has these parameters: `D` (128), `B` (3), `T` (4096 keys), `LAYERS` (36 sign vectors)
and `SIGN_SEED`. Commands arrive on a valid/ready port. `cmd_ready` is high only while the macro
is idle, so a command sent during an operation waits; the sender must hold it stable (an
assertion checks this). Only one operation runs at a time.

| `cmd_op` | uses | does | cycles, d = 128 |
|---|---|---|---|
| `OP_WRITE_KEY` | `cmd_vec`, `cmd_addr`, `cmd_layer` | quantize the key with that layer's signs and store it | about 2d + log2 d + 3 = 266 |
| `OP_QUERY` | `cmd_vec`, `cmd_layer` | rotate the query and rebuild the table; `query_loaded` rises when done | about log2 d + 2^b + 6 = 21 |
| `OP_SCORE` | `cmd_addr`, `cmd_count` | stream scores for `cmd_count` keys starting at `cmd_addr` (addresses wrap at `T`) | about n + log2 d + 5 |

Scores come out one per cycle on `score_valid` / `score_addr` / `score`, with no
backpressure. The first score leaves log2(d) + 3 cycles after the command is accepted: the row
read, the table lookup, the tree levels and the multiply. `op_done` pulses once at the end of
each operation.

A key and the query it is scored against must use the same layer, since both rotations must use
the same sign vector. The macro scores whatever table it holds; keeping that straight is the
host's job.

One macro holds one attention head of one layer. A model needs one macro per (layer, KV head),
for example 32 × 8 = 256 for LLaMA-3.1-8B. At T = 4096 their key rows take 52 MB, against
268 MB for the same keys in FP16. Values are not stored: the paper's architecture stops at the
attention score.

## Sign vectors and calibration

The randomized Hadamard transform needs one sign vector per layer. A random vector works well
for most models. The paper finds, though, that on models whose key norms vary strongly from layer
to layer, some random vectors concentrate a large-norm key onto a few coordinates, and the fixed
codebook then fails. Its remedy is offline: for each layer, try 200 random vectors on a few
calibration samples and keep the one with the lowest quantization error. The hardware is
unchanged; only the stored vector differs.

In `sign_rom`, each layer starts with a default vector computed at elaboration from `SIGN_SEED`
and the layer number by a 32-bit xorshift generator. A write on `sign_ld_en` / `sign_ld_layer` /
`sign_ld_data` replaces one layer's vector with a calibrated one, as an eFuse or a load-on-boot
SRAM would. Reset brings the defaults back. The calibration search is software and is not part of
this RTL.

## Verification

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each computes its
expected values independently, in real arithmetic (`tb/fp16_ref_pkg.sv`), and checks latency
where it matters:

* The arithmetic blocks (`hadamard_rotator`, `adder_tree`, `table_generator`,
  `norm_multiplier`, `norm_extractor`) must match a real-arithmetic reference bit for bit. The
  reference performs the same operations in the same order, with FP16 rounding after each one.
  The rotator is also checked against the explicit Hadamard matrix.
* `codebook_rom` is checked against the published Lloyd-Max table, and for the Lloyd-Max
  conditions themselves: each boundary is the midpoint of its neighbouring centroids, and each
  centroid is the mean of its cell, found by numerical integration.
* `tb_axelram_macro` runs the whole macro at d = 32, T = 64. A reference model quantizes every
  key and scores it with the formula above. The test requires each of these at least once: key
  writes, two queries (a table rebuild), stalled commands, a calibrated sign load, three
  layers, a wrapping and an empty score run, and gap-free streaming with the stated latency.
* `tb_axelram_full` runs the default size (d = 128, T = 4096, no overrides). It writes 4096
  keys, loads a query and streams all 4096 scores, checking each one. It counts 5,120
  multiplications against 524,288 for a dequantizing datapath, and the RMS error of the estimate
  against the exact `<q, k>` (about 0.016 of ‖q‖‖k‖). It takes about a minute.

* `tb_axelram_bitwidths` runs the macro end to end at the other two bit-widths, b = 2 and
  b = 4 (d = 32, 32 keys, two queries). It checks every score against the Lloyd-Max reference
  for that width. The RMS error against the exact `<q, k>` falls from about 0.056 (b = 2) to
  0.017 (b = 4) of ‖q‖‖k‖.

A key with a rotated coordinate within 0.03 of a boundary may land on the neighbouring index
under FP16 rounding. For such keys the end-to-end tests allow one index step of tolerance.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_axelram_macro \
  -Irtl -y rtl -y tb +libext+.sv rtl/axelram_pkg.sv tb/fp16_ref_pkg.sv tb/tb_axelram_macro.sv \
  --Mdir obj -o sim && ./obj/sim
```

Each run ends with a line `TB_RESULT checks=N failures=M`. All RTL is plain synthesizable
SystemVerilog. Memories are written as arrays; swap in real macros for `kv_sram` and
`table_sram` when targeting a process.

## Departures and limits

* **Write path multipliers.** The paper calls the write path multiplier-free. That holds for
  the rotator and the quantizer, but a norm needs squares and a division. `norm_extractor` has
  one FP16 multiplier and one divider, used sequentially.
* **Write rate.** The sequential norm extractor limits writes to one key every ~266 cycles. The
  paper gives no write rate. A parallel extractor would raise it, at the cost of 128 multipliers
  and dividers.
* **Codebook values.** They come from the Gaussian approximation, not from the paper's solver
  for a given d.
* **Timing closure.** Each pipeline stage holds one FP16 add or multiply, except the rotator
  (one FP16 add per stage) and the table generator (128 multipliers in one cycle). No timing
  closure has been attempted.
* **The 6T SRAM.** The paper's key store is a 6T SRAM cell array. Here it is a plain synthesizable
  memory array; the bit-cell circuit is outside the scope of RTL.
* **Out of scope.** Softmax, value storage and the multiply-by-values step are not part of the
  macro, and the paper does not describe them.
