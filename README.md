# Integer-only Transformer and LSTM forecasters for a Spartan-7 sensor node

Combined sewer systems overflow into rivers when a storm fills the overflow
basins faster than the treatment plant can drain them. A basin-level forecast
made next to the level sensor, on a battery-powered node, can trigger an
actuator or a warning without a network link. This RTL is the FPGA half of
such a node. A small microcontroller wakes up on a timer, reads the sensor,
powers up an AMD Spartan-7 XC7S15 and hands it the last *n* normalised level
samples. The FPGA runs a quantised neural network and returns a one-step-ahead
forecast. Then it can be switched off again.

Two forecasters are provided. One generic parameter of the top chooses
between them:

* an **encoder-only Transformer**: an input projection with positional
  encoding, one single-head self-attention encoder layer with a 4×-wide
  feed-forward network, global average pooling and a linear output. This is
  the default: *n* = 24 samples and *d*<sub>model</sub> = 40, which is
  19 841 parameters (19.84 KB).
* a **single-layer LSTM** with HardSigmoid/HardTanh gates, followed by a
  linear layer. With *h* = 16 this is 1 169 parameters (1.17 KB).

Everything is integer-only: 8-bit tensors, 32-bit accumulators, no
floating point and no lookup tables except the positional-encoding constants.
The clock target is 100 MHz.

## System view and host interface

```
 RP2040 MCU ──bus──▶ host_if ──▶ window_buffer ──x──▶ model engine ──y──▶ host_if ──irq──▶ MCU
                          └─────── parameters ─────────▶ (Transformer or LSTM)
```

`edge_forecaster` is the top. Its ports are plain signals:

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock (100 MHz), asynchronous active-low reset |
| `bus_we` | in | 1 | write strobe; the write happens on the rising clock edge |
| `bus_addr` | in | 16 | word address |
| `bus_wdata` | in | 32 | write data; only bits 7:0 are used for samples and parameters |
| `bus_rdata` | out | 32 | read data, a combinational function of `bus_addr` |
| `irq` | out | 1 | sticky "forecast ready"; cleared by the next start |

| address | access | content |
|---|---|---|
| `0x0000` | W | bit 0 = 1 starts an inference (ignored while busy) |
| `0x0000` | R | `{30'b0, done, busy}` |
| `0x0001` | R | forecast *y*, sign-extended 8-bit Q4.4 |
| `0x0002` | R | clock cycles from start to done of the last inference |
| `0x1000 + t` | W | input sample *x*[t], t = 0 is the oldest |
| `0x8000 + p` | W | model parameter *p* (maps below); writes past the model's size are ignored |

Window and parameter writes are dropped while the engine is busy, and so is a
second start. The parameters are held in on-chip memories. Because the FPGA
is powered down between inferences, the host is expected to reload them after
each power-up. The cycle counter measures the latency *T* in the node's
energy figure *E* = *P* × *T*.

## Number format

Every tensor, parameter and intermediate value is a signed 8-bit number with
4 fraction bits (Q4.4: 1.0 = 16, range −8.0 … +7.9375, zero point 0). The
format is defined once in `fc_pkg`. The rules are:

* **Products** are accumulated exactly in 32 bits.
* **Requantisation** back to 8 bits is `(acc + 8) >>> 4`, which rounds half
  up, followed by saturation to −128 … 127.
* **A bias** enters the accumulator pre-shifted, as `b << 4`, so
  `y = sat(round((Σ w·x + b·16) / 16))`.
* **Element-wise products** (LSTM Hadamard, batch-norm scale) are
  requantised the same way.
* **Element-wise sums** (residual connections, LSTM cell update) saturate.

The activations are:

* HardSigmoid: `clamp(round(x·10923 / 2^16) + 8, 0, 16)`, i.e.
  clamp(x/6 + 0.5, 0, 1).
* HardTanh: `clamp(x, −16, 16)`.
* ReLU.

A trained model with per-tensor scales must be converted to this fixed scale
before its parameters are loaded (see *Departures* below).

## The Transformer engine

### Dataflow

`transformer_model` chains eight stages. Each stage owns one
multiply-accumulate unit, and each starts on the previous stage's `done`:

| stage | module | operation | cycles (N = n, D = d<sub>model</sub>) |
|---|---|---|---|
| input projection | `input_projection` | E = x·W<sub>in</sub> + b<sub>in</sub> + PE | N·D + 1 |
| Q, K, V projections | `self_attention` (3× `seq_linear`) | D×D linear each | 3(N·D² + 1) |
| scores, softmax, ·V | `attention_core` | softmax(QKᵀ/√D)·V | N(2ND + 2N + 32) + 1 |
| output projection + residual | `seq_linear` | R1 = A·W<sub>o</sub> + b<sub>o</sub> + E | N·D² + 1 |
| BatchNorm 1 | `batchnorm` | X1 = γ′·R1 + β′ | N·D + 1 |
| FFN | `feedforward` | R2 = ReLU(X1·W1 + b1)·W2 + b2 + X1 (hidden width 4D) | 2(4N·D² + 1) |
| BatchNorm 2 | `batchnorm` | X2 = γ′·R2 + β′ | N·D + 1 |
| output | `output_projection` | mean over tokens, then D → 1 linear | N·D + 1 + D + 2 |

The total is 512 693 cycles for N = 24 and D = 40, which is 5.127 ms at
100 MHz.

The tensors between stages (E, R1, X1, R2, X2, Q, K, V, A and the FFN hidden
layer) sit in simple one-write, one-read buffers (`act_buffer`), stored
token-major (token·D + channel).

`seq_linear` is the common workhorse. It applies one OUT×IN weight matrix to
each of the N tokens in turn, one product per cycle. It can optionally apply
ReLU or add a residual tensor read through a second port.

BatchNorm is used in its inference form. The running mean and variance are
folded into a per-channel scale γ′ and shift β′ before loading.

Positional encoding uses the usual sinusoid, PE[p][2m] = sin(p / 10000^(2m/D))
and PE[p][2m+1] = cos(…), quantised to Q4.4. The table is computed at
elaboration time by a constant function (`$sin`, `$cos`, `$pow`), so no data
file is needed.

### Parameter map (offsets into the `0x8000` window)

```
input projection   W_in[D], b_in[D]                          2D
self-attention     Wq[D][D], bq[D], Wk.., bk.., Wv.., bv.., Wo.., bo..   4(D²+D)
BatchNorm 1        γ'[D], β'[D]                              2D
feed-forward       W1[4D][D], b1[4D], W2[D][4D], b2[D]       8D²+5D
BatchNorm 2        γ'[D], β'[D]                              2D
output             W_out[D], b_out                           D+1
                                                   total 12D²+16D+1
```

Every weight matrix is stored row-major: `W[out][in]`.

### Integer softmax

The attention scores are the least obvious part. `attention_core` handles one
query row at a time:

1. **Scores.** S[j] = sat(round(Σ<sub>i</sub> Q[s][i]·K[j][i] · INV_SQRT_D / 2^20)),
   with INV_SQRT_D = round(2^16/√D). Scores are Q4.4. The running maximum is
   tracked while they are produced.
2. **Exponent.** z = S[j] − max ≤ 0 is converted to base 2:
   u = floor(z·23637 / 2^14), using 23637 = round(log2(e)·2^14) and keeping
   4 fraction bits. Then 2^u is formed as a shift of (1 + frac(u)), a linear
   interpolation inside each octave, with 1.0 = 2^15. Exponents below −15
   give 0. The sum of the row's exponents is accumulated.
3. **Reciprocal.** recip = floor(2^31 / sum), from a 32-step restoring
   divider. This is the only division per row.
4. **Normalise.** P[j] = min(255, round(e[j]·recip / 2^23)): probabilities
   with 8 fraction bits.
5. **Weighted sum.** A[s][o] = sat(round(Σ<sub>j</sub> P[j]·V[j][o] / 2^8)).

Because the maximum is subtracted first, the largest term is always exactly
1.0 and the sum is never zero. An assertion (`a_sum_nonzero`) guards this.

A row costs 2ND + 2N + 32 cycles.

## The LSTM engine

`lstm_model` is `lstm_layer` (the time loop) followed by `linear_layer`
(h → 1). `lstm_layer` clears h and c at the start of every window, then runs
`lstm_cell` once per sample and passes the final h to the output layer.

`lstm_cell` computes one time step:

* **Gates.** The four gates (PyTorch order i, f, g, o) each have their own
  accumulator. Their input is the concatenation z = [x<sub>t</sub>, h<sub>t−1</sub>],
  presented one element per cycle by a multiplexer. For each hidden unit j
  this takes H + 1 cycles and produces all four gate sums at once.
* **Cell update.** The gates then go through HardSigmoid (i, f, o) and
  HardTanh (g). The cell computes c = f⊙c + i⊙g and h = o⊙HardTanh(c) with
  two `hadamard_mul` units, one cycle per unit.
* **Double buffering.** The new h values go into a second buffer, so that
  h<sub>t−1</sub> stays intact until the step ends.

A step takes H(H+2)+1 cycles. The whole model takes
N·(H(H+2)+2) + H + 3 cycles, which is 6 979 cycles (70 µs) for n = 24, h = 16.

LSTM parameter map:

```
W_ih[4][H] (one input per gate unit) | W_hh[4][H][H] | b[4][H] | W_out[H] | b_out
```

Each gate has one combined bias (b_ih + b_hh). The total is 4H² + 9H + 1.

## Sizes and the evaluated configurations

The parameters of `edge_forecaster` are `MODEL` (`MODEL_TRANSFORMER` or
`MODEL_LSTM`), `SEQ_LEN`, `D_MODEL` and `HIDDEN`. The configurations selected
for the node, and what this RTL needs for them:

| model | n | d / h | parameters | latency here | reported for the node |
|---|---|---|---|---|---|
| Transformer | 6 | d = 8 | 897 B | 5 661 cycles, 0.057 ms | 0.091 ms |
| Transformer | 12 | d = 16 | 3 329 B | 42 941 cycles, 0.429 ms | 0.532 ms |
| Transformer (default) | 24 | d = 40 | 19 841 B | 512 693 cycles, 5.127 ms | 5.134 ms |
| LSTM | 6 | h = 16 | 1 169 B | 1 759 cycles, 0.018 ms | 0.046 ms |
| LSTM | 12 | h = 8 | 329 B | 995 cycles, 0.010 ms | 0.039 ms |
| LSTM | 24 | h = 16 | 1 169 B | 6 979 cycles, 0.070 ms | 0.182 ms |

**Memory.** The default Transformer keeps 19 841 parameter bytes and
13·N·D activation bytes on chip: about 266 Kbit of the XC7S15's 360 Kbit
block RAM. The packing into 18 Kbit blocks is tight. The largest size in the
search space (d = 64 at n = 24) needs about 574 Kbit and does not fit.

**Multipliers.** After synthesis the default Transformer has 19 multipliers,
against 20 DSP slices. The LSTM has 7.

**Latency.** The Transformer latency matches the reported figure closely,
because it is essentially one MAC per cycle per stage. The LSTM here is 2–4×
faster than reported: all four gates are computed in parallel, and the time
loop has no extra overhead.

## Departures from the published design

* **Fixed number format.** The original flow trains with quantisation-aware
  training and uses per-tensor scales at 4, 6 or 8 bits. Here every tensor
  uses one fixed power-of-two scale (Q4.4) at 8 bits. Models chosen at 6 bits
  (the n = 6 Transformer) run at 8 bits here. `DATA_W` and `FRAC_W` in
  `fc_pkg` can be changed, but the constants in the softmax and HardSigmoid
  assume 4 fraction bits.
* **Own approximations.** The integer softmax, the HardSigmoid constant, the
  sinusoidal positional encoding and the BatchNorm folding are choices made
  here. The source describes these blocks only by name.
* **Own microarchitecture.** The MAC-per-stage scheduling and the LSTM's
  four-gates-in-parallel schedule are also this design's own. The
  Transformer's latency agrees with the reported one to 0.2 %; the LSTM's
  does not (see above).
* **Host interface.** The bus, its address map and the cycle counter are
  this design's own. The node's MCU and its SPI or bitstream handling are
  not part of this RTL.
* **Power gating** of the FPGA is done by the node's hardware, outside this
  logic.
* Only one model is built per bitstream, chosen by `MODEL`. The energy and
  power figures of the node are measurements and have no RTL counterpart.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench has a
watchdog and ends with a line `TB_RESULT checks=N failures=M`.

**Reference models.** The expected values come from independent behavioural
models: `tb_ref_pkg` (fixed-point helpers, the LSTM) and `tb_tf_ref_pkg` (the
Transformer layers, softmax and the full model). These use plain integer
arithmetic on dynamic arrays and share no code with the RTL.

**Testbenches:**

* Each block's testbench checks random inputs against the reference models.
  Where the block has a fixed latency, it checks the cycle count too.
* `tb_transformer_model` runs the whole Transformer at n = 24, d = 40 with
  random parameters.
* `tb_edge_forecaster` drives the default top (the Transformer) only through
  the host bus. It loads all parameters, runs a storm-like rising window and
  random windows, and checks:
  * RESULT against the reference model
  * CYCLES against 512 693
  * that a start and writes issued while busy are dropped

  It also counts each mechanism and fails if any count stays at zero. The
  mechanisms are:
  * irq
  * ignored start
  * dropped writes
  * out-of-range parameter writes
  * positional encoding added
  * softmax rows
  * exponent underflow
  * ReLU clipping
  * residual saturation
* `tb_workloads` runs the four smaller configurations of the table above
  (Transformer n=6/d=8 and n=12/d=16, LSTM n=6/h=16 and n=12/h=8) through
  the top in parallel, using the helper `tb_workload_runner`.
* `tb_edge_forecaster_lstm` does the same for the LSTM build. It counts the
  recurrent steps, HardSigmoid saturation at 0 and at 1, and HardTanh
  clipping of g and c.

All testbenches pass. Each one was also run against a copy of its block
broken in one realistic way (for example a dropped rounding constant, a wrong
parameter offset or a reversed concatenation), and each then reports
failures.

To simulate one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Wno-WIDTH --top-module tb_edge_forecaster \
  -y rtl tb/tb_ref_pkg.sv tb/tb_tf_ref_pkg.sv rtl/fc_pkg.sv tb/tb_edge_forecaster.sv
./obj_dir/Vtb_edge_forecaster
```

The full-size run simulates about 2.6 million cycles and takes a few seconds.

## Module hierarchy

```
edge_forecaster
├── host_if
├── window_buffer
├── transformer_model            (MODEL = MODEL_TRANSFORMER)
│   ├── input_projection ── seq_linear, positional_encoding
│   ├── self_attention ──── seq_linear ×4, act_buffer ×4, attention_core
│   ├── batchnorm ×2
│   ├── feedforward ─────── seq_linear ×2, act_buffer
│   ├── output_projection ─ global_avg_pool, linear_layer
│   └── act_buffer ×5
└── lstm_model                   (MODEL = MODEL_LSTM)
    ├── lstm_layer ── lstm_cell ── hard_sigmoid ×3, hard_tanh ×2, hadamard_mul ×2
    └── linear_layer
fc_pkg: number format, saturating arithmetic, model selector
```

Known lint warnings that remain:

* Unused upper bits of the 32-bit bus data, of the pooling product and of
  the LSTM output-layer address offset.
* An unused residual read address on the first FFN layer, which has no
  residual.
* `rst_n` is used both as an asynchronous reset and in assertions'
  `disable iff`.

None of them is a circuit problem.
