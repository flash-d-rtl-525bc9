# FLASH-D attention kernel in SystemVerilog

This design computes attention, `Attn(q, K, V) = Σ_i softmax(q·k)_i · v_i`, one
key/value pair per clock cycle. It uses no maximum search, no running sum of
exponentials and no final division. FlashAttention normally keeps three running
quantities per query: a running maximum, a running sum of exponentials and an
unnormalised output, which must be divided by the sum at the end. FLASH-D
replaces all three with one running weight `w_i`:

    w_1 = 1,     w_i = σ(s_i − s_{i−1} + ln w_{i−1})          (i > 1)
    o_1 = v_1,   o_i = o_{i−1} + (v_i − o_{i−1}) · w_i

Here `s_i = q·k_i` is the attention score and `σ(x) = 1/(1+e^−x)` is the logistic
sigmoid. In exact arithmetic `w_i = e^{s_i} / Σ_{j≤i} e^{s_j}`, which is the share
of the newest key in the softmax over the keys seen so far. `o_i` is then exactly
the softmax-weighted average of `v_1..v_i`. The division is hidden inside the
sigmoid, and the only exponential-like function sees a score *difference*. That
makes the computation numerically stable without subtracting a maximum.

Two range rules make the hardware cheaper:

- **Large drop.** If `s_i − s_{i−1} ≤ −6`, `w_i` is set to a tiny default and the
  output update is skipped (`o_i = o_{i−1}`).
- **Large rise.** If `s_i − s_{i−1} ≥ 11`, `w_i` is set to a default just below 1
  and the output is overwritten (`o_i = v_i`).

Because of these rules, the sigmoid only has to be approximated for moderate
inputs. It and the logarithm are both 8-segment piece-wise-linear (PWL) functions.

## Kernel organisation

`flashd_top` serves `NQ` queries in parallel. Each query has its own *lane*, and
all lanes share one key/value buffer:

```
             kv_buffer (DEPTH x {k,v})          controller (IDLE/RUN/DRAIN)
                 | k_i           | v_i                  | first/last tags
                 | (broadcast)   +--> delay log2(D)+2 --+----------------+
   lane j:       v                                                        v
   q_j --> [dot_product] --s_i--> [weight_unit] --w_i, case--> [output_unit] --> attn[j]
```

- **Controller.** `start` reads buffer addresses `0..n_keys−1`, one per cycle. The
  key goes to the dot product of every lane. The value vector waits in a shared
  delay line until the weights it belongs to are ready. The first key of a
  sequence and the last key of a tile travel with the data as a two-bit tag
  (`fd_pkg::kv_tag_t`). There are no back-pressure stalls: once started, the
  kernel takes one pair per cycle until the tile ends.
- **dot_product.** A query register, D multipliers, a product register, and a
  balanced tree of two-input adders with one register per level.
- **weight_unit.** Stage A registers the score difference `s_i − s_{i−1}`.
  Stage B is the loop of the recursion. It computes `ln w_{i−1}`, adds it to the
  difference, evaluates σ, picks one of the four cases (below) and stores the new
  weight in the `w_{i−1}` register.
- **output_unit.** D copies of the element operation
  `o ← o + (v − o)·w` (one subtractor, one multiplier, one adder), plus the hold
  and overwrite bypasses.

### The four weight cases

`weight_unit` reports which case produced each weight on `w_sel`
(`fd_pkg::wsel_t`). `output_unit` acts on that code, not on the weight's value:

| `w_sel`       | condition (d = s_i − s_{i−1})     | weight            | output update             |
|---------------|-----------------------------------|-------------------|---------------------------|
| `WSEL_START`  | first key of a sequence           | 1.0 (`W_ONE`)     | `o ← v`                   |
| `WSEL_LOW`    | d ≤ −6                            | `W_LO` ≈ 0.0001   | hold (no update)          |
| `WSEL_HIGH`   | d ≥ 11                            | `W_HI` = 0.99609  | `o ← v`                   |
| `WSEL_SIGMOID`| otherwise                         | σ(d + ln w_{i−1}) | `o ← o + (v−o)·w`         |

The high default is the largest BFloat16 value below 1. The value 0.9999 cannot
be represented in BFloat16; it would round to 1.0, and then the next step would
take `ln 1 = 0`. The start case loads `v` directly. That gives the same value as
the arithmetic update with `w = 1`, but the stale output of the previous
operation never enters the computation.

## Number formats

Scores, weights, query, key, value and output elements are floating-point words
with `EW` exponent bits and `MW` mantissa bits. The default is BFloat16
(`EW=8, MW=7`). The arithmetic is the simplified kind common in accelerators:

- round to nearest, ties to even;
- subnormal inputs and results are flushed to zero;
- no infinity or NaN, because the all-ones exponent is an ordinary exponent;
- overflow saturates to the largest magnitude.

For FP8-E4M3 (`EW=4, MW=3`), this means the largest value is 480, and the code
`S.1111.111` is a number rather than NaN.

The non-linear path works in signed fixed point: 28 bits with 20 fractional bits
(`fd_pkg::FIX_W`, `fd_pkg::FRAC`). Two helpers connect the formats:

- `fp_to_fix` truncates toward zero and saturates. It is used for the score
  difference.
- `fix_to_fp` rounds to nearest even. It is used for the sigmoid result.

The range check uses the fixed-point difference, so its boundaries −6 and 11 are
exact.

## The piece-wise-linear functions

Both functions use 8 segments. Segment `k` evaluates `y = A_k·t + B_k` with
integer coefficients scaled by 2^20. Each segment's line is the minimax
straight line on its interval. Its slope is the chord of the function over the
interval. Its offset is half the largest deviation between the function and the
chord, so the error alternates in sign with equal peaks. The coefficients are
computed this way offline and written into the RTL as constants. Neighbouring
segments therefore do not meet exactly.

**ln_pwl.** The input is a float `w = 1.m · 2^e` in (0,1). The unit computes
`ln w = e·ln2 + ln(1.m)`:

- The exponent term uses the constant `LN2 = round(ln2 · 2^20) = 726817`.
- The mantissa term uses the top three mantissa bits to select a segment of
  [1,2), each 1/8 wide.
- Within a segment, `t` is the fraction of the way through the segment.
- The peak error is 8.7·10^−4, and it is the same at every exponent.

Splitting off the exponent keeps the relative accuracy constant down to the
smallest weights. A PWL over (0,1) taken directly would lose all precision near
0, where `ln` is steepest.

**sigmoid_pwl.** It uses 8 segments over x ∈ [−9.25, 0], with breakpoints
−9.25, −7, −5.5, −4.3, −3.25, −2.3, −1.45, −0.7. The breakpoints are denser
where σ bends most.

- Positive inputs use the symmetry σ(x) = 1 − σ(−x).
- The result is clamped to `[W_LO, W_HI]`. This keeps every weight strictly
  inside (0,1), so the next `ln` stays finite.
- The peak absolute error is 3.8·10^−3.
- The steps between segments are below 7.6·10^−3.

The sigmoid argument `d + ln w_{i−1}` can lie below −6 even when `d` itself is in
range. For that reason the PWL covers more than the range-check interval.

## Timing

All timing is counted in rising clock edges, at one key/value pair per cycle.

| step                               | edges      |
|------------------------------------|------------|
| buffer read                        | 1          |
| products registered                | 1          |
| adder tree, one level per register | log2(D)    |
| score difference (weight stage A)  | 1          |
| weight register and output update  | 1          |
| **key read to updated o_i**        | **log2(D)+4** (8/10/12 for D = 16/64/256) |

- The value vector is delayed by `log2(D)+2` edges after its read.
- `done` pulses `n_keys + log2(D) + 3` edges after the edge that samples `start`.
  At that point `attn` holds `o_N` of every lane, and it stays valid until the
  next `start`.
- `busy` falls in the same cycle as `done` is high. `start` is accepted in any
  cycle with `busy` low, so the next operation can start right away. The
  testbench runs operations back to back that way.

The recursion itself is a one-cycle loop through `ln`, an adder, σ and a
multiplexer. This is the critical path of the design. The score difference is
registered before it, so that loop holds no floating-point adder.

## Long sequences: tiles and `cont`

The buffer holds `DEPTH` = 128 pairs. A longer sequence is cut into tiles:

1. Load the first tile and pulse `start` with `cont = 0`.
2. After `done`, load the next tile into the buffer and pulse `start` with
   `cont = 1`. Each lane keeps its previous score, weight and output, so the
   recursion continues as if the keys had been one sequence.

The result after the last tile is the attention over all tiles. Queries beyond
`NQ` need another pass over the keys with new queries loaded.

Writing the buffer or the query registers while `busy` is high is not allowed,
and neither is `n_keys > DEPTH`. Assertions check both rules. A `start` with
`n_keys = 0` is ignored. A design that
overlaps loading with computation would need a second buffer, which is not
provided here.

## Interface of `flashd_top`

| port                                   | dir | meaning                                            |
|----------------------------------------|-----|----------------------------------------------------|
| `clk`, `rst_n`                         | in  | clock, asynchronous active-low reset               |
| `q_we`, `q_sel`, `q_data[D]`           | in  | write the query of lane `q_sel`                    |
| `kv_we`, `kv_addr`, `k_data[D]`, `v_data[D]` | in | write one key/value pair into the buffer     |
| `start`, `cont`, `n_keys`              | in  | run `n_keys` keys (addresses 0..n−1); `cont` continues the previous sequence |
| `busy`                                 | out | an operation is running                            |
| `done`                                 | out | one-cycle pulse: `attn` is valid                   |
| `attn[NQ][D]`                          | out | output vector of every lane                        |

Parameters:

| name | default | meaning |
|---|---|---|
| `EW`, `MW` | 8, 7 | float format (BFloat16) |
| `D` | 64 | head dimension, a power of two |
| `NQ` | 4 | parallel query lanes |
| `DEPTH` | 128 | key/value buffer depth |
| `W_LO`, `W_HI`, `W_ONE` | `16'h38D2`, `16'h3F7F`, `16'h3F80` | default weights, encoded in the float format |

When `EW`/`MW` are changed, the three weight constants must be re-encoded. For
E4M3, for example, use `W_LO = 8'h08` (2^−6, the smallest normal), `W_HI = 8'h37`
(0.9375) and `W_ONE = 8'h38`. `flashd_cfg_tb` runs these settings. With
E4M3 the low default 2^−6 is far above the true weight after a large drop, so
the second effect described below is stronger in that format.

## Accuracy and a limit of the recursion

Every block is exact to its own specification. The floating-point units round
correctly, and the PWL units match their tables. Accuracy against exact softmax
attention is set by two effects.

**1. The PWL error is carried forward.** Each weight is computed from the
previous one. An error in σ or ln therefore shifts all later weights, and the
effect grows with the sequence length. The end-to-end testbench uses random
scores with a spread of a few units and output values of magnitude 0.125–0.5.
The largest element errors it observed were:

- about 0.01 at 16–48 keys;
- 0.07–0.21 at 128 keys;
- up to 0.23 at 320 keys.

These are compared with the same recursion evaluated in real arithmetic. An
8-segment PWL is too coarse to track small weights. Around `w ≈ 0.01` its relative
error reaches about 17%. More segments, or a larger `FRAC`, would improve this;
the segment count is the easiest knob.

**2. The low default breaks the recursion.** After a large drop, `w_i` is set to
0.0001 instead of the tiny true value. The recursion then treats that key as if
it carried a softmax share of 10^−4. If several keys drop in a row, the next
moderate score is compared against the wrong reference. This is visible in real
arithmetic, with no rounding at all. In one test sequence with repeated drops of
more than 6, the exact-softmax error of the recursion reached 0.93, while the
hardware matched the recursion to 0.07. In this case, with FLASH-D's default
rule, the hardware is right and the default rule is what introduces the error.
Real attention scores rarely produce such patterns: in language models only
0.5–2.8% of updates are skipped at all. Still, a user should know that the
defaults are an approximation, not an equivalence.

## Differences from the published description

- **Sign of `ln w_{i−1}`.** The derivation and the data-path drawing add
  `ln w_{i−1}`; one listing of the algorithm subtracts it. Addition is correct
  (subtracting makes weights grow as the previous weight shrinks). It is what is
  built and tested, and the testbenches use a deliberately broken copy that
  subtracts it to prove they notice the difference.
- **High default weight.** 0.99609 (largest BFloat16 below 1) instead of the
  printed 0.9999, as explained above.
- **PWL coefficients.** The original fits were made with a continuous
  least-squares PWL fitting package and are not published. Breakpoints and
  coefficients here are this design's own minimax fits.
- **Dot-product adder.** The original uses a fused multi-operand floating-point
  adder; this design uses a tree of rounded two-input adders. Results can
  differ from a fused adder by a few units in the last place.
- **Value reads on skipped updates.** A skipped update (large drop) could avoid
  loading `v_i` at all. Here the value vector is read together with its key,
  before its score is known, so it is always read. The skip only suppresses the
  arithmetic and the output register write.
- **Register placement.** Only the total latency (log2(d)+4 cycles) was given.
  The split into stages is this design's own.
- **Everything around the kernel** was not specified and is this design's own:
  the number of lanes, the buffer, the controller, the load ports, `start`/`done`
  and tile continuation.

## Files

`rtl/`:

| file | content |
|---|---|
| `fd_pkg.sv` | fixed-point format, weight-case enum, range limits, tag struct |
| `fp_mul.sv`, `fp_add.sv` | float multiplier, adder/subtractor |
| `fp_to_fix.sv`, `fix_to_fp.sv` | format conversion |
| `ln_pwl.sv`, `sigmoid_pwl.sv` | PWL functions |
| `dot_product.sv` | query register and pipelined dot product |
| `weight_unit.sv` | recursion for `w_i` and case selection |
| `output_unit.sv` | output vector update |
| `kv_buffer.sv` | key/value memory |
| `flashd_top.sv` | lanes, shared buffer, value delay, controller |

`tb/` has one self-checking testbench per block, `<module>_tb.sv`, and a shared
package, `fp_tb_pkg.sv`. The package converts between float words and `real` and
provides the reference functions. The reference values in each testbench are
computed in `real` arithmetic, independently of the RTL. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog if the
design hangs.

- **Unit testbenches.** The float units are checked against correctly rounded
  results. The PWL units are checked against `ln`/σ within their error bounds.
  The pipeline latencies are checked cycle by cycle.
- **`flashd_top_tb`.** This testbench runs at the default parameters and covers:
  - 1, 16, 48 and 128 keys;
  - a full buffer;
  - back-to-back operations;
  - a 320-key sequence in three tiles with `cont`;
  - score patterns that force every weight case.

  It checks the result against the real-arithmetic recursion and the `done`
  timing, and counts each mechanism (sigmoid, low, high, start, full buffer,
  back-to-back, continued tile). If any of them never happened, it reports a
  failure.

- **`flashd_cfg_tb`.** This testbench runs the kernel in the other sizes and
  formats: BFloat16 with D = 16 and 256, and FP8-E4M3 with D = 16 and 64. It
  uses two lanes and a 32-key buffer, and the helper module `flashd_cfg_run`
  drives and checks each instance. The measured `done` timing confirms
  latencies of 8, 12, 8 and 10 cycles. Over 32 keys the errors against the
  recursion reached about 0.11 in BFloat16 and up to 0.4 in E4M3. E4M3 rounds
  every weight to 3 mantissa bits, and `ln` passes that error on to the next
  weight.

To simulate, for example, the whole kernel:

```
verilator --binary --timing --assert -Wno-fatal tb/fp_tb_pkg.sv rtl/fd_pkg.sv \
    rtl/fp_mul.sv rtl/fp_add.sv rtl/fp_to_fix.sv rtl/fix_to_fp.sv rtl/ln_pwl.sv \
    rtl/sigmoid_pwl.sv rtl/dot_product.sv rtl/weight_unit.sv rtl/output_unit.sv \
    rtl/kv_buffer.sv rtl/flashd_top.sv tb/flashd_top_tb.sv --top-module flashd_top_tb
./obj_dir/Vflashd_top_tb
```

A unit testbench needs only its module, its helpers, `fd_pkg.sv` and
`fp_tb_pkg.sv`.
