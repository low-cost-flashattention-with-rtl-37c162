# FlashAttention-2 with fused ExpMul operators: RTL

Attention for one query is `softmax(q·Kᵀ)·V`. FlashAttention-2 computes it in a
single pass over the keys and values. It keeps a running maximum `m` of the
scores, a running sum of exponentials `l`, and a running output vector `o`.
Whenever the maximum grows, `l` and `o` are rescaled by `e^(m_old − m_new)`.
A direct hardware version of that loop needs an exponential unit and a row of
floating-point multipliers for every scaling step.

This design replaces each "exponential, then multiply a vector by it" pair
with one **ExpMul** operator. The exponent is always ≤ 0, so `e^x` is rounded to
a power of two, `2^−L`. Multiplying a floating-point number by `2^−L` only
subtracts `L` from its exponent field. What remains is a small fixed-point
shift-and-add that finds `L`, plus one integer subtractor per vector element.
There is no floating-point multiplier and no exponential unit in the update
loop. The result is still a floating-point number, so no conversion step
follows.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. It is
parameterised for BFloat16 (the default) or FP32, and for hidden dimensions
d = 16, 64 (the default) and 256.

## 1. The loop the hardware runs

Append a leading element to the output and to every value vector:
`o* = [l, o₁ … o_d]` and `v* = [1, v₁ … v_d]`. One update then covers both the
sum of exponentials and the output:

```
for each key/value pair i = 1..N:
    s_i   = dot(q, k_i)
    m_i   = max(m_{i-1}, s_i)
    o*_i  = ExpMul(m_{i-1} − m_i, o*_{i-1}) + ExpMul(s_i − m_i, v*_i)
attn = o*_N[1..d] / o*_N[0]          -- o / l
```

Both ExpMul arguments are ≤ 0: one is the old maximum minus the new one, the
other is the score minus the maximum. `l` is simply element 0 of the
accumulator. The value of element 0 of `v*` is the constant 1.0, so
`ExpMul(x, 1)` adds exactly `2^−L` to `l`. As a result, `l` is the sum of the
same quantised weights that scale the values, and the final division yields a
true weighted average of the value vectors.

On the first key, `m_{i-1}` is taken equal to `s_1`, which gives an argument of
0, and the accumulator is treated as zero. No −∞ initial value is needed.

## 2. ExpMul, step by step (`log2exp.sv`, `expmul.sv`)

`ExpMul(x, V) = e^x · V ≈ 2^−L · V`, with `L = round(−x · log₂e)`.

1. **Clip.** `e^x` is negligible below `x = −15` (e^−15 ≈ 3·10⁻⁷), so x is
   clipped to [−15, 0]. A positive x, which the kernel never produces, clips
   to 0.
2. **Convert to fixed point.** The clipped value becomes a 16-bit
   two's-complement number `Xf`. It has 6 integer bits (sign included) and
   10 fraction bits. That covers [−21.64, 0], the range after scaling by
   log₂e. The conversion shifts the significand `1.M` by `exponent − bias + 10`
   and truncates the magnitude.
3. **Scale by log₂e with shifts.** `Y = Xf + (Xf >>> 1) − (Xf >>> 4)`, which is
   a factor of 1.4375 (log₂e = 1.4427).
4. **Round.** `L = (−Y + 0.5) >> 10`, so ties go to the larger L. L lies in
   0..22 and fits in 5 bits.
5. **Shift the exponent.** For every element `V = (−1)^S · 2^(E−bias) · 1.M`,
   the result is `(S, E − L, M)`. If `E − L ≤ 0` (the element would become
   subnormal), or V is already zero, the result is 0.

Worked examples: x = −1 gives L = 1, so V is halved. x = −8 gives
Xf·1.4375 = −11.5, a tie, so L = 12. Any x ≤ −15 gives L = 22.

One `log2exp` is shared by all d+1 elements of a vector, because they all
have the same x. The output update therefore costs two Log2Exp units and
2(d+1) exponent subtractors, where the direct version needs two exponential
units and 2(d+1) multipliers.

Accuracy: 2^−L is within a factor of about 2^±0.5 of e^x. Both `l` and `o`
use the same weights, so each output element stays inside the range of its
value column. The end-to-end testbench checks this independently of the
bit-exact comparison.

## 3. One query lane (`query_block.sv`)

```
 k (broadcast) ─► dot_unit ──s──► max_sub_unit ──x_new,x_old──► output_update ──l,o──► divide_unit ─► attn
 q register ───┘  D×fp_mul,       m register,                  2×expmul, (D+1)×fp_add,   1 fp_div,
                  adder tree      fp_max, 2 subtractors         o* register (D+1 floats)  D cycles
 v (delayed) ───────────────────────────────────────────────────┘
```

| stage | module | registers | notes |
|---|---|---|---|
| products | `dot_unit` | 1 | D floating-point multipliers |
| adder tree | `dot_unit` | log₂D | one register per tree level; balanced binary order |
| max and differences | `max_sub_unit` | 1 | the `m` register loops back through `fp_max` within one cycle |
| ExpMul, add, accumulate | `output_update` | 1 | the `o*` register loops back through ExpMul and the adder within one cycle |
| divide | `divide_unit` | — | one element per cycle after the last key |

Both recurrences (`m` and `o*`) close within a single cycle, so a new key can
enter every cycle (initiation interval 1). A key's read address reaches the
accumulator update after **log₂D + 4 cycles**, counting the buffer read. That
is 8, 10 and 12 cycles for d = 16, 64 and 256, which matches the 8–12 cycle
latency reported for the original design. The placement of the registers is
this design's own choice.

The value vector must meet the ExpMul arguments computed from its own key. The
top level reads `k_i` and `v_i` in the same cycle and delays `v_i` by
2 + log₂D cycles (`VLAT`).

## 4. The kernel (`fa2_expmul_top.sv`)

NQ lanes (default 4) each hold one preloaded query. The key/value buffer
(`kv_buffer`, DEPTH = 256 rows of D floats each for K and V) supplies one key
and one value per cycle. These are broadcast to all lanes, so every lane
processes the same stream of keys against its own query. The controller
(`fa2_ctrl`) drives the run:

1. **Load.** Write queries with `q_we/q_sel/q_data` and keys/values with
   `kv_we/kv_addr/k_data/v_data`. Key i and value i share address i.
2. **Stream.** Pulse `start` with `seq_len = N` (1..DEPTH). The controller
   reads addresses 0..N−1 on N consecutive cycles. It tags the data with
   `{valid, first, last}` (`fa_pkg::tag_t`), and the tag travels down the
   pipeline with it.
3. **Drain and divide.** After the last key, each lane's accumulator holds
   `o*_N`. The lane's divider computes `o/l` one element per cycle.
4. **Done.** When all lanes have finished, `done` pulses. `attn[n]` then holds
   the attention vector of query n, and it holds until the next run.

Timing from the edge that samples `start` to `done`: **N + log₂D + D + 6
cycles** (N + 76 at the defaults). `busy` is high in between, and a `start`
while busy is ignored. Queries and buffer contents stay in place between
runs, so a run can be repeated or only part of the data reloaded. Vector
element j sits at bits `[j*W +: W]`, and lane n of `attn` at `attn[n]`.

## 5. Number format and arithmetic conventions

Every float is `{sign, EXP_W exponent bits, MAN_W mantissa bits}`. The default
(8, 7) is BFloat16; (8, 23) is FP32. The multiplier, adder, max and divider
(`fp_mul`, `fp_add`, `fp_max`, `fp_div`) are plain combinational textbook
units with these conventions:

- round to nearest, ties to even;
- an exponent field of 0 reads as zero (no subnormals), and results below the
  smallest normal number become +0;
- overflow produces infinity; NaN and infinity inputs get no special handling,
  since finite inputs never produce them in this kernel;
- every zero result is +0.

None of these conventions comes from the original design, which does not
state them.

## 6. Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `EXP_W`, `MAN_W` | 8, 7 | float format (BFloat16; use 8, 23 for FP32) | formats evaluated for the design |
| `D` | 64 | hidden dimension (power of two) | one of the evaluated sizes 16 / 64 / 256 |
| `NQ` | 4 | parallel query lanes | this design's choice; the original leaves it open |
| `DEPTH` | 256 | longest sequence N held in the buffer | this design's choice |
| `fa_pkg::FIX_W/FIX_FRAC` | 16 / 10 | Log2Exp fixed-point format | as described for the design |
| `fa_pkg::CLIP_MAG` | 15 | clip bound of x | as described for the design |

A smaller head fits a larger build: zero-pad q, k and v. The padded products
add exactly zero, and the padded outputs come out as 0.

## 7. Where this RTL departs from, or adds to, the original design

- The original operators were produced by high-level synthesis. This RTL is
  hand-written from the algorithm and block diagram, so area and power figures
  of the original do not transfer to it.
- Choices made here because the original is silent on them:
  - the rounding of the float-to-fixed conversion (truncation);
  - the tie rule of Log2Exp (ties to the larger L);
  - the floating-point conventions of §5;
  - the pipeline register placement;
  - the first-key initialisation;
  - the K/V buffer size and ports;
  - the controller protocol;
  - the number of lanes;
  - a divider that is time-shared over the D elements (one per lane).
- The figure caption of the original calls the ExpMul step an "exponent
  increment", while its equations subtract L from the exponent. The RTL
  follows the equations.
- The original says a result "is set to 0" on overflow of the exponent
  arithmetic. Because L ≥ 0, the only case that can occur is underflow, and
  that is what is flushed to zero here.
- The baseline kernel used for comparison in the original work is not
  included. It has a separate exponential unit with piece-wise-linear
  approximation and separate multipliers.
- Not simulated: sequences longer than the buffer, and FP32 or d = 256 with
  long sequences (those configurations are run with 8 to 32 keys only).
- The original's accuracy study ran a language model in software. It is not
  reproduced here.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. The reference arithmetic (`fp_ref_pkg.sv`)
computes in double precision and rounds to the target format, so it is
independent of the RTL's bit manipulation. It also contains a bit-exact model
of one lane that follows the RTL's order of operations.

| testbench | what it checks |
|---|---|
| `tb_fp_mul`, `tb_fp_add`, `tb_fp_div`, `tb_fp_max` | 12 000 random and near-cancellation operand pairs each, BFloat16 and FP32, bit-exact |
| `tb_log2exp` | hand-worked L values (0, −0.25, −1, −2, −8, −15, clip, +x, −∞), the Q6.10 value, 10 000 random arguments |
| `tb_expmul` | identity at x = 0, halving at x = −1, random vectors including zeros and underflow |
| `tb_dot_unit` | random keys at random times; result, tag and latency 1 + log₂D; back-to-back input |
| `tb_max_sub_unit` | sequences with first/last tags; m, both differences, new-maximum flag |
| `tb_output_update` | o* after every step, the L values, the final_valid pulse, clipped arguments |
| `tb_divide_unit` | quotients and the D + 1 cycle timing |
| `tb_kv_buffer`, `tb_fa2_ctrl` | read-after-write, hold; address sequence, tags, busy/done, ignored start |
| `tb_query_block` | whole lane against the algorithm model; latency log₂D + D + 4 |
| `tb_fa2_expmul_top` | D = 16, 2 lanes: runs with N = 1 to 32, back-to-back and busy starts, clipping, underflow, moving maximum; each mechanism counted and required |
| `tb_fa2_full` | default build (D = 64, 4 lanes, N = 256): bit-exact results, done latency |
| `tb_fa2_workloads` | BFloat16 d = 16 zero-padded on a D = 64 build, BFloat16 d = 256, FP32 d = 16, 64 and 256 (short sequences) |

Run any of them with plain Verilator from the project root, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    tb/fp_ref_pkg.sv rtl/fa_pkg.sv tb/tb_fa2_expmul_top.sv --top-module tb_fa2_expmul_top
./obj_dir/Vtb_fa2_expmul_top
```

`tb_fa2_full` and `tb_fa2_workloads` take two to three minutes to build, and
each runs in well under a second.

## 9. Files

`rtl/`: `fa_pkg` (constants, tag and state types), `fp_mul`, `fp_add`,
`fp_max`, `fp_div`, `log2exp`, `expmul`, `dot_unit`, `max_sub_unit`,
`output_update`, `divide_unit`, `query_block`, `kv_buffer`, `fa2_ctrl`,
`fa2_expmul_top` (top).
`tb/`: the testbenches above, `fp_ref_pkg` (reference model) and `wl_harness`
(one configuration of the workload test).
