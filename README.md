# Integer-only Transformer encoder for small FPGAs

This design forecasts the next value of a time series from a window of past
samples. It does so with a complete Transformer encoder that uses no floating
point, no exponential function, no square root and no divider wider than one
bit per clock. Every tensor is a signed `b`-bit integer with its own scale and
zero point. Every place where two scales meet is replaced by an integer
multiply and an arithmetic right shift, called *ApproxMul* below. The design
saves area, not time: each component owns a single multiply-accumulate (MAC)
unit and walks its tensors one element at a time. The components run one
after another and pass their results through small on-chip buffers. At the
default size (window n = 12, width d_model = 32, m = 7 input features,
4 bits) one forecast takes 164,364 clocks. That is 1.3 ms at 125 MHz.

The RTL is SystemVerilog (IEEE 1800-2017). All blocks are synthesizable. It
follows the integer-only Transformer accelerator for embedded FPGAs by Ling et
al. (single head, batch norm instead of layer norm, LUT-based Softmax). Where
that description is silent, this design makes its own choices, listed in
[Departures and own choices](#departures-and-own-choices).

## The network that is computed

The input `X` has n rows (time steps) of m features. The output is one value `y`.

| # | stage (`stage_e`) | operation | shape out | component |
|---|---|---|---|---|
| 1 | `ST_LIN_IN`  | L_input: X W^T + b | n x d | `linear_layer` |
| 2 | `ST_ADD_PE`  | add positional encoding table | n x d | `add_q`, `pe_lut` |
| 3-5 | `ST_LQ`, `ST_LK`, `ST_LV` | Q, K, V = L_Q, L_K, L_V of X_embed | n x d each | `linear_layer` x3 |
| 6 | `ST_SCORE`   | S = Q K^T, scaled by 1/sqrt(d) | n x n | `matmul_q`, address mapping on |
| 7 | `ST_SOFTMAX` | row-wise Softmax | n x n | `softmax_q` + `nr_divider` |
| 8 | `ST_ATTN`    | P V | n x d | `matmul_q`, address mapping off |
| 9 | `ST_LO`      | L_O | n x d | `linear_layer` |
| 10 | `ST_ADD_MHA` | residual: L_O + X_embed | n x d | `add_q` |
| 11 | `ST_BN_MHA`  | batch norm, folded to gamma * x + beta | n x d | `batchnorm_q` |
| 12 | `ST_FFN1`    | L_FFN1 (d -> 4d), ReLU on the write path | n x 4d | `linear_layer`, `relu` |
| 13 | `ST_FFN2`    | L_FFN2 (4d -> d) | n x d | `linear_layer` |
| 14 | `ST_ADD_FFN` | residual: FFN + BN_MHA output | n x d | `add_q` |
| 15 | `ST_BN_FFN`  | batch norm | n x d | `batchnorm_q` |
| 16 | `ST_GAP`     | mean over the n rows | d | `gap_q` |
| 17 | `ST_LIN_OUT` | L_output (d -> 1) | 1 | `linear_layer` |

There is a single attention head. Splitting into heads and concatenating them
is therefore the identity, and no hardware exists for it. The model has
12 d² + (15 + m) d + 1 weights, biases and BN parameters. That is 12,993 words
at the default size.

## ApproxMul: how scales become integers

A real value is stored as `q` with `real = S * (q - Z)`. When a layer
multiplies or adds tensors of different scales, the output is:

```
y_q = clamp( floor( acc * M / 2^shift ) + Z_y ,  -2^(b-1), 2^(b-1)-1 )
```

Here `acc` is the exact integer sum of products of zero-point-corrected
operands, for example `sum_k (x_q - Z_x)(w_q - Z_w) + bias_q`.
`M / 2^shift` approximates the real factor `S_x S_w / S_y`. `approx_mul`
implements this formula. It is a combinational block with a 32-bit input, a
16-bit `M` and a flag that reports clamping. Each component instantiates it
on its output path:

* `linear_layer`: the sum over inputs plus the bias. The bias is stored at
  scale `S_x S_w`, so it is added before rescaling.
* `matmul_q`: the same without a bias. For the score product, the factor
  `1/sqrt(d_model)` is folded into `M`, so scaling costs nothing.
* `add_q`: each operand gets its own ApproxMul (`M1/2^sh1`, `M2/2^sh2`). The
  two results are added, offset by `Z_3`, and clamped.
* `batchnorm_q`: mean and variance are folded into a per-feature gamma and
  beta offline. The offset is stored at scale `S_gamma S_x`, so the block
  computes `(gamma_q - Z_g)(x_q - Z_x) + beta_q` and then one ApproxMul.
* `gap_q`: a column sum, with `1/n` folded into `M`.

Rounding is floor (arithmetic shift). The shift is a constant, so it is only
wiring in hardware.

The constant sets (`Z_x`, `Z_w`, `Z_y`, `M`, `shift`) are parameters in
`rtl/tt_pkg.sv`: `Q_LIN_*`, `Q_MM_*`, `Q_BN_*`, `Q_GAP` and `Q_ADD_*`. In a
deployed model they come from quantization-aware training. The values shipped
here are not trained. They were picked so that uniformly random 4-bit weights
keep most activations inside the 4-bit range, which lets the testbenches
exercise every path. **To run a trained model, replace these constants.** The
weights are loaded at run time, but the constants are fixed when the design
is elaborated.

The top accepts other bitwidths (`B` parameter). In that case it adds `B - 4`
to the shift of every stage that multiplies two B-bit operands (linear,
matmul, BN). This keeps values at the same share of the output range. A
trained model at that bitwidth would bring its own constants instead.

## Softmax without exp() or a wide divider

Softmax is the hardest part of the design. `softmax_q` processes one row of
the n x n score matrix at a time, in three passes:

1. **Maximum.** It reads the n scores and keeps the largest, `mx`.
2. **Table lookup.** It reads the row again. For every score `x`, the offset
   `mx - x` lies between 0 and 2^b - 1. Because this offset is never
   negative, `exp(-(mx - x) * S_score)` always lies in (0, 1], and a small
   table can hold every possible value. Two tables are indexed by the
   offset:
   * **NLUT** (3b bits) gives the numerator. It is stored in a row-local
     register file of n entries.
   * **DLUT** (2b bits) gives the denominator term. The block accumulates
     `sum += DLUT[mx - x] - Z_E`.
3. **Division.** Each stored numerator is divided by `sum` in `nr_divider`.
   The output is `clamp(quotient + Z_A)`.

The tables are scaled as follows. Let `S_E = n² h / (2^(2b) - 1)`. This scale
puts the sum of the n exponentials of a row (at most n) inside the signed
2b-bit range. The tables are then:

```
DLUT[i] = clamp( round( exp(-i * S_score) / S_E ) + Z_E , 2b bits)   (see below)
NLUT[i] = clamp( round( exp(-i * S_score) / (S_E * S_A) ), 3b bits)
Z_E     = 2^(2b-1) - round(1/S_E)          (126 at b = 4, n = 12)
S_A     = 1 / (2^b - 1),  Z_A = -2^(b-1)   (softmax output covers [0, 1])
```

The quotient `NLUT / sum` is then the probability in units of `S_A`. The
tables depend on the scale of the scores, so they are loaded, not computed:
the testbenches build them from `$exp()`.

Z_E is a subtlety. In the source description, the denominator table is
written without `Z_E`, yet the running sum subtracts `Z_E` from every entry.
The two statements only agree if the table already contains the offset.
This design therefore stores `round(E / S_E) + Z_E` in DLUT and subtracts
`Z_E` in the sum. If your tables lack the offset, load `Z_E` into DLUT as
well, or change `Z_E` (a `softmax_q` parameter).

`nr_divider` is an unsigned radix-2 non-restoring divider:
* It produces one quotient bit per clock, then one clock to correct the remainder.
* A 3b-bit dividend is done 3b + 2 clocks after `start`.
* There is no combinational divide anywhere, so the clock is limited by the
  MAC paths, not by division.

The design adds two guards:
* A negative numerator is treated as 0.
* A sum of 0 or less is treated as 1.
Neither can happen with tables built as above.

Softmax latency is `1 + n (2(n + 1) + n (3b + 4))` clocks, which is 2,617 at
the default size.

## Reading K transposed without transposing it

The score is `S = Q K^T`. `K` sits in its buffer row-major as n x d. Instead
of writing a transposed copy, `matmul_q` computes the B-operand read address
in one of two ways. With `ADDR_MAP = 1`, it reads element (k, j) of the
second operand from address `j * INNER + k`, which is `K[j][k] = K^T[k][j]`.
With `ADDR_MAP = 0`, it reads the plain `k * COLS + j`. The same component
therefore computes `P V` (mapping off). `transformer_accel` uses mapping on
for `u_mm_score` and mapping off for `u_mm_attn`.

## Components, buffers and timing

Every component has the same handshake:
* `start` is a one-clock pulse. `busy` stays high while the component works.
* `done` is a one-clock pulse together with the last write.
* A component reads its input buffer through an address output, with one
  clock of read latency (`act_buffer` is a synchronous-read RAM, like FPGA
  block RAM).
* It writes its output buffer through `we`/`addr`/`data`.

The MAC loops are pipelined one deep: issue the address, receive the data,
then accumulate.

| component | clocks per call |
|---|---|
| `linear_layer` (R rows, I in, O out) | R O I + 2 |
| `matmul_q` (R x K times K x C) | R C K + 2 |
| `add_q`, `batchnorm_q` (L elements) | L + 2 |
| `gap_q` (n x d) | n d + 2 |
| `softmax_q` | 1 + n(2(n+1) + n(3b+4)) |

`layer_sequencer` holds the current `stage_e`. It pulses `stage_start` for
each stage in turn and moves on when that stage's `done` arrives. Each
hand-over costs one clock, and the final `ST_DONE` state costs two. The
total at the defaults is 164,364 clocks. The source reports 166,394 clocks
for its own implementation of this configuration.

Every intermediate tensor has its own `act_buffer`:
* `x`, `emb`, `xe`, `q`, `k`, `v`, `s`, `p`, `a`, `o`, `m`, `n1`, `f1`,
  `f2`, `r2`, `n2` and `g`.
* At the default size this is 6,548 words, about 26 kbit at 4 bits.
* Weights live inside each `linear_layer` (`w_mem`, `b_mem`). BN parameters
  live inside `batchnorm_q`, and the positional encoding in `pe_lut`.

Q, K and V are computed one after another rather than in parallel. Three
stages read `xe`, and two stages read `n1`; the top multiplexes the read
address of each of these buffers by stage.

The ReLU after L_FFN1 is `max(x, Z)`, where `Z` is the zero point that
represents real 0. It sits on the write path into `f1` and costs no clock.

## Loading a model and running it

`transformer_accel` has one write port, `cfg` (`cfg_wr_t`: `we`, `target`,
`addr`, `data`). It takes one word per clock. `target` selects the memory:

| target | contents | address |
|---|---|---|
| `T_X` | input window, n x m | `t*m + f` |
| `T_LIN_IN_W/B`, `T_LQ_W/B`, `T_LK_W/B`, `T_LV_W/B`, `T_LO_W/B`, `T_F1_W/B`, `T_F2_W/B`, `T_OUT_W/B` | weights `W[o][k]` / biases `b[o]` of each linear layer | `o*IN + k` / `o` |
| `T_PE` | positional encoding, n x d | `t*d + j` |
| `T_NLUT`, `T_DLUT` | Softmax tables, 2^b entries | offset `mx - x` |
| `T_BN1_G/B`, `T_BN2_G/B` | folded gamma / beta per feature | `j` |

The data is sign-extended into `data`, which is 32 bits wide so that NLUT
words fit up to b = 10.

To run an inference:
1. Load the parameters once.
2. Write a window to `T_X`.
3. Pulse `start`. It is ignored while `busy` is high.
4. Wait for the one-clock `done` pulse. `y` is valid then and holds until the
   next result.

`stage` shows the running stage. An assertion flags `cfg` writes while
`busy` is high. A new window may be written as soon as `done` has been seen.

Parameters of the top:
* `N` (12), `D` (32), `M` (7) and `B` (4).
* The defaults come from `tt_pkg`.

For a dataset with fewer features, either elaborate a smaller `M` or load
zero-point weights into the unused input columns.

## Files

* `rtl/tt_pkg.sv` holds the sizes, ApproxMul constant sets, the load-target
  and stage enums, and the `cfg_wr_t` struct.
* Arithmetic and storage: `approx_mul`, `act_buffer`, `relu` and `pe_lut`.
* Components: `linear_layer`, `add_q`, `matmul_q`, `nr_divider`,
  `softmax_q`, `batchnorm_q` and `gap_q`.
* Control and top: `layer_sequencer` and `transformer_accel`.
* `tb/tb_<block>.sv` is one self-checking testbench per block. Each compares
  against values computed independently in the testbench and checks the
  cycle counts above.
* `tb/tb_transformer_accel.sv` runs the top at its default size and checks
  four inferences:
  * A reference model in the testbench predicts all 16 intermediate buffers
    and `y`, and every value is compared.
  * The latency is checked.
  * It counts the transposing and plain address modes, divisions, ReLU
    clamps, saturation, residual signs and an ignored `start`, and fails if
    any of these never happens.
* `tb/tb_workloads.sv` with `tb/accel_harness.sv` runs the same checks at
  six other sizes: (n, d, m, b) = (6, 64, 7, 8), (12, 64, 7, 6),
  (12, 32, 1, 4), (6, 8, 7, 8), (18, 16, 7, 6) and (24, 32, 7, 4). It
  measures 305,720 and 621,836 clocks for the first two. The source reports
  282,974 and 575,696 for those configurations.

## Simulating

Verilator 5 with `--timing` is enough. The package goes first:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tt_pkg.sv \
    tb/tb_transformer_accel.sv --top-module tb_transformer_accel -Mdir obj
./obj/Vtb_transformer_accel
```

For the workload test, add `tb/accel_harness.sv` after the package and use
`tb_workloads` as the top. Every testbench ends with the line
`TB_RESULT checks=<n> failures=<n>`. The default-size test takes well under
a second.

The testbenches read no files: all weights, tables and inputs are generated
with `$urandom`, `$sin`, `$cos` and `$exp`.

## Departures and own choices

* **Run-time parameters.**
  * The source generates one fixed hardware instance per trained model, with
    weights baked in.
  * Here weights, biases, BN parameters, the PE table and the Softmax tables
    are RAMs loaded through `cfg`. Only the ApproxMul constants stay
    elaboration-time.
  * The host interface is this design's own.
* **Untrained constants.** The ApproxMul constants in `tt_pkg` are
  placeholders chosen for random weights, as described above.
* **Floor rounding.** ApproxMul floors. The source only says the factor is
  applied by right-shifting.
* **DLUT offset.** DLUT is taken to include `Z_E`, as explained in the
  Softmax section.
* **Schedule.**
  * Strictly one component at a time, including Q, K and V. The source gives
    no schedule.
  * The cycle count lands within 1.2% of the source's at the default size,
    and 8% above it at d_model = 64.
* **FFN naming.** The parameter table of the source names the d -> 4d layer
  L_FFN1. Its block diagram draws the labels the other way round. This design
  follows the table: L_FFN1 (d -> 4d), ReLU, L_FFN2 (4d -> d).
* **Other bitwidths.** Non-4-bit instances reuse the 4-bit constants with
  shifts grown by `B - 4`, and derive `Z_A` and `Z_E` from `B` and `N`.
* **Not built.**
  * Multiple heads: the design is for h = 1.
  * The host microcontroller that would feed windows and read forecasts.
  * Training and quantization-aware training, which produce the constants
    and weights offline.
