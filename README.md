# Multi-level binarized LSTM layer

An LSTM layer spends nearly all its arithmetic on multiply-accumulates. Each
gate of each hidden unit needs a dot product over the input features and over
the previous hidden state. Plain binarization (every weight and input replaced
by ±1) turns these into XNOR and bit counts, but on EEG classification it loses
about 20 points of accuracy. This design keeps most of that saving while
almost closing the gap. Every weight, input and bias is written as a short
sum of signed powers of two, `±α ± α/2 ± α/4 ± …`. Each term costs one bit.
The scaling factor `α` is itself a power of two. A product of two such values
is then a product of two small integers, 6 bits × 6 bits for five levels,
followed by one shift. The full 32-bit floating-point multiplier is gone.

The RTL implements this as one LSTM layer. It has four multi-level MAC units,
one per gate. Weights and biases are binarized once, as they are loaded, and
kept as 5-bit codes. Inputs and the fed-back hidden state are binarized on the
fly. The layer walks through the hidden units one after another. Its defaults
are sized for EEG recordings of 32 features per time step, with 5-level inputs
and 5-level weights. The method
is that of N. Nazari, S. A. Mirsalari, S. Sinaei, M. E. Salehi and
M. Daneshtalab, *Multi-level Binarized LSTM in EEG Classification for Wearable
Devices*. That paper describes the encoding and the MAC unit. The layer
around them is this design's own construction, and the sections below say
which parts are which.

## 1. Multi-level residual binarization

For a value `x` and a scaling factor `α = 2^-s`, the encoder produces `N`
sign bits:

```
r = x
for i = 1 .. N:
    l_i = (r >= 0)              // 1 stands for +1, 0 for -1
    r   = r - (±1) * α / 2^(i-1)
```

Each level binarizes whatever residual the levels before it left. Each level
also uses half the scale of the previous one. So `x ≈ α · Σ s_i 2^-(i-1)`,
with `s_i = 2 l_i − 1`.

The key step for the hardware is to read the bits `l_1 … l_N`, `l_1` first,
as an unsigned number `L`. The approximation is then an odd integer times a
power of two:

```
ML(x) = 2L − (2^N − 1)            ∈ {−(2^N−1), …, −1, +1, …, 2^N−1}
x    ≈ ML(x) · α / 2^(N−1)
```

Example with N = 5, α = 1/2 and x = 0.3:

| step | residual r | level |
|---|---|---|
| 1 | 0.3 | 1 |
| 2 | −0.2 | 0 |
| 3 | 0.05 | 1 |
| 4 | −0.075 | 0 |
| 5 | −0.0125 | 0 |

The result is `L = 10100b = 20` and `ML = 9`, so `x ≈ 9 · (1/2) / 16 = 0.28125`.

With N = 1 this reduces to the sign function, and the product of two 1-level
codes is the XNOR of their bits read as ±1. That is the conventional
binarized network. More levels give a finer odd-integer grid over
`[−2α, 2α)`. Outside that range, values saturate to the outermost code.

`ml_encoder` unrolls the loop into `N` add/subtract stages and encodes one
value per cycle. The step sizes `2^(12−s−i)` are exact in the 12-fraction-bit
word as long as `s + N − 1 ≤ 12`.

## 2. The MAC unit

```
x ─► encoder(α_x) ─► X_ml ─┐
                           ├─► MUL (ML·ML, small ints) ─► ACC ─► >>> shift(γ) ─► result
w ─► encoder(α_w) ─► W_ml ─┘
```

`ml_mac` builds this from:

- `ml_encoder`: two instances, one for the input and one for the weight.
- `ml_mul`: decodes both codes to `ML` and multiplies them.
- `ml_acc`: accumulates the products and applies the shift.

A dot product of `K` terms stands for

```
Σ x_k w_k ≈ Σ ML(x_k) ML(w_k) · γ / 2^((NLA−1)+(NLB−1)),   γ = α_x α_w = 2^-(s_x+s_w)
```

The accumulator therefore holds an exact integer sum. Only at the end is that
sum converted to a Q4.12 word, by one arithmetic shift of
`s_x + s_w + NLA + NLB − 2 − 12` positions. The conversion rounds toward minus
infinity and saturates to 16 bits. With 5 × 5 levels a product fits in
±961. The 24-bit accumulator is far more than a 64-term dot product needs.

Timing: one (x, w) pair per clock while `in_valid` is high. `first` and `last`
frame a dot product. The result appears on `out`/`out_valid` one clock after
the cycle that carries `last`. A new dot product may start in the very next
cycle. `out_sat` flags a clipped result.

## 3. The LSTM layer (`mlb_lstm`)

Per time step `t` and hidden unit `j` the layer computes, with gates
`g ∈ {c, f, i, o}`:

```
pre_g[j] = γ_f · Σ_k ML(Wf_g[j,k]) ML(x_t[k])          forward half, α_Wf
         + γ_r · Σ_k ML(Wr_g[j,k]) ML(h_{t-1}[k])      recurrent half, α_Wr
         + ML(b_g[j]) · α_B / 2^(NLB−1)                bias, α_B
m = tanh(pre_c), f = σ(pre_f), i = σ(pre_i), o = σ(pre_o)
c_t[j] = f·c_{t-1}[j] + i·m,     h_t[j] = o·tanh(c_t[j])
```

**Two dot products per gate row.** The forward and recurrent weights carry
different scaling factors, so their products have different γ. Each row is
therefore run as two back-to-back dot products. The first covers the `NX`
columns against `x_t`, the second the `NH` columns against `h_{t-1}`. Each is
shifted by its own γ, and the two results are added. In the MACs, the
recurrent half simply follows the forward half. Its `first` restarts the
accumulator, and the forward result is latched one clock later.

**Four MACs in lock step.** All four gate matrices are read with the same
(row, column) address, one column per clock, from four banks of `param_mem`.
The four MACs therefore share `first`/`last` and the input operand. They
differ only in the weight.

**Weights are stored as codes.** The weight encoder of the MAC diagram is
placed in the parameter load path. Each weight or bias written on `pw_*` is
binarized with the factor of its class. The factor is `α_B` for a bias,
`α_Wf` for a forward column and `α_Wr` for a recurrent column. Only the
`NLB`-bit code is stored. At the defaults this is 41,600 bits of parameter
memory, against 133,120 bits for 16-bit words. The MACs are built with
`W_CODED = 1`, so they take the stored code directly and encode only the
input operand. The consequence is that changing `α_Wf`, `α_Wr` or `α_B`
requires writing the parameters again. `α_X` can be changed at any idle
time.

**Fed-back hidden state.** `h_{t-1}` is binarized by the same input encoder
and with the same `α_X` as the features. The stored bias codes are decoded
back to a Q4.12 word by a shift, because they are added rather than
multiplied.

**Activations** are the hard forms. The sigmoid is `clip((x+1)/2, 0, 1)`,
which is the hard sigmoid the paper defines for stochastic binarization.
Tanh is `clip(x, −1, 1)`. Both are an adder, a shift and comparisons.
`lstm_update` then forms `c_t` and `h_t` with ordinary 16-bit fixed-point
multipliers. The element-wise step is not binarized.

**State.** `c` is updated in place, one word per hidden unit. `h` is double
buffered. The new values collect in `h_next`, and `h_prev` (the `h_{t-1}` that
the recurrent dot products read) is replaced only after the last hidden unit.

### Controller and timing

| state | what happens |
|---|---|
| IDLE | `x_ready` is high. Features are taken one per `x_valid` beat into `xbuf`. `seq_clear` zeroes `h` and `c`. `cfg_we` loads scaling factors. Parameter writes are allowed. |
| ISSUE | For unit `j`, the weight columns `k = 0 … NX+NH−1` are read, one per clock. The MACs see each column one clock later. |
| WAIT | Waits for the recurrent result, the pre-activation sum, the activations and the state update. Then it emits `h_t[j]` on `h_valid/h_index/h_data`, stores `c_t[j]`, and moves on to `j+1` or back to IDLE. |

One hidden unit takes `NX + NH + 4` clocks. One time step takes
`NH · (NX + NH + 4)` clocks after the edge that accepts the last feature.
`step_done` is set on that edge. At the defaults this is 2176 clocks. With
`NX` input beats, a step takes 2208 clocks, and a 1300-step EEG recording takes
2,870,400 clocks. While a step runs `x_ready` is low (back-pressure).
Assertions check two rules: parameters are never written while `busy` is
high, and the four MACs stay in lock step.

## 4. Interface and number formats

All real values are signed Q4.12 words: 16 bits, range [−8, 8), LSB 1/4096.
A scaling factor is carried as its shift `s` (α = 2^-s, 4 bits).

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cfg_we`, `cfg_scale` | in | 1, 16 | load `{x, wf, wr, b}` shifts (idle only; rewrite the parameters after changing `wf`, `wr` or `b`) |
| `scale` | out | 16 | current shifts; reset value `{1, 2, 3, 1}`, i.e. X = 1/2, W_f = 1/4, W_r = 1/8, B = 1/2 (the published 5×5-level choice) |
| `pw_en`, `pw_bias`, `pw_gate`, `pw_row`, `pw_col`, `pw_data` | in | | write a Q4.12 weight (`pw_col < NX`: forward, `≥ NX`: recurrent column `pw_col−NX`) or bias, encoded on the way in; gate order c, f, i, o |
| `seq_clear` | in | 1 | start a new sequence: h = c = 0 (idle only) |
| `x_valid`, `x_ready`, `x_data` | in/out/in | 1,1,16 | feature stream, NX beats per time step |
| `h_valid`, `h_index`, `h_data` | out | 1, log2 NH, 16 | one hidden output per unit as it completes |
| `step_done`, `busy` | out | 1 | end of time step; a step is running |
| `mac_clip` | out | 1 | a gate dot product saturated |

Parameters: `NX` = 32 features and `NH` = 32 hidden units. `NLA` and `NLB`
are the level counts of inputs and of weights/biases, default 5 and 5. The
level counts are fixed when the design is built. The scaling factors can be
changed at run time.

## 5. What follows the source and what is this design's choice

Taken from the source method:

- the residual binarization and its halving scales;
- power-of-two scaling factors per parameter class, applied as shifts;
- the MAC structure: encoders, small fixed-point multiplier, accumulator,
  final γ shift;
- the LSTM equations with forward and recurrent weights concatenated per gate;
- 32 features per step and 1300 steps per recording;
- 5-level inputs and weights;
- the default scaling factors.

Chosen here, where the source says nothing:

- **Word format** Q4.12, and **rounding** toward minus infinity with
  saturation after every shift.
- **Hidden size** `NH = 32`. The source does not give it.
- **Recurrent input**: `h_{t-1}` is binarized with `α_X`. The source only
  says that inputs and parameters are binarized.
- **Biases** are binarized with the weight level count and decoded before
  the addition.
- **Activations** are hard sigmoid and hard tanh.
- **When weights are encoded.** Weights and biases are encoded once, at load
  time, and stored as codes. The source shows an encoder on the weight path
  and stresses the memory saving, but it does not say when the encoding
  happens. The stand-alone `ml_mac` (`W_CODED = 0`) keeps the weight encoder
  in front of the multiplier, exactly as drawn.
- **The element-wise update** uses full 16-bit multipliers.
- **The controller**: one hidden unit at a time, one column per cycle, four
  gate MACs in parallel. The streaming interface, the parameter and
  configuration ports, `seq_clear`, and the register-array memories (no SRAM
  macro) are also this design's.

Not included: the EEG acquisition front end and the output classifier. The
source specifies neither. `x_*` and `h_*` are the places to attach them. A
deeper network would chain layers, feeding one layer's `h` stream into the
next layer's `x` input (with `NX` of the second layer equal to `NH` of the
first). The source mentions stacked layers but gives no layer count, so no
stack is built here.

A note on names: the source uses `W_f` both for the forget-gate weights (in
the LSTM equations) and for the *forward* weights (in its table of scaling
factors). Here `wf`/`α_Wf` always means forward, the part of each gate
matrix that multiplies `x_t`, and `wr`/`α_Wr` means recurrent. The forget
gate is gate `f` (`GATE_F`).

## 6. Files

`rtl/` holds:

- `ml_pkg.sv`: types, word format, scale record, default scaling factors.
- `ml_encoder.sv`, `ml_mul.sv`, `ml_acc.sv` and `ml_mac.sv`: the MAC unit.
- `sigmoid_unit.sv`, `tanh_unit.sv` and `lstm_update.sv`: activations and the
  state update.
- `param_mem.sv`: the four weight banks and the bias arrays, with a
  configurable word width.
- `mlb_lstm.sv`: the top.

`tb/` holds one self-checking testbench per module. It also holds
`tb_ml_ref_pkg.sv`, a reference model written independently of the RTL. It
encodes in real arithmetic, which is exact here because every value is
dyadic, and it models a whole LSTM step.

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
counts a failure if a testbench hangs. Example with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
    rtl/ml_pkg.sv tb/tb_ml_ref_pkg.sv tb/tb_mlb_lstm.sv --top-module tb_mlb_lstm
./obj_dir/Vtb_mlb_lstm
```

| testbench | what it checks |
|---|---|
| `tb_ml_encoder` | 1/3/4/5 levels, all α from 1 to 1/16, a sweep of the whole input range, random inputs, the worked example above |
| `tb_ml_mul` | all code pairs for 5×5 and 3×5 levels; the 1×1 case equals XNOR |
| `tb_ml_acc` | random dot products, back-to-back and with gaps; random γ; saturation; one-clock latency |
| `tb_ml_mac` | (5,5), (3,5) and (1,1) builds against real-arithmetic dot products; latency; the `W_CODED` build fed with reference codes |
| `tb_sigmoid_unit`, `tb_tanh_unit` | every input word |
| `tb_lstm_update` | random gates and states, including saturation of `c` |
| `tb_param_mem` | every location of all banks; read latency; output hold |
| `tb_mlb_lstm` | NX = 6, NH = 4; 14 steps over three sequences; back-pressure, gaps, `seq_clear`, scale changes, saturation; every `h_t[j]` and the step latency |
| `tb_mlb_lstm_l34`, `tb_mlb_lstm_l11` | the same scenario built for 3/4 levels and for 1/1 level (plain binarized) |
| `tb_mlb_lstm_full` | the same scenario at the default size (32 × 32, 5 × 5 levels) |
| `tb_eeg_sequence` | a whole 1300-step, 32-feature sequence at the default size with synthetic EEG-like inputs; every hidden output and the exact cycle count (2,870,400) |

Runtime is a few seconds for each testbench and about 10 s for
`tb_eeg_sequence`. The weights in the testbenches are random, because trained
EEG weights are not available. The tests therefore show that the arithmetic
and sequencing match the equations. They say nothing about classification
accuracy.
