# LSTM neuron equalizer — synthesizable SystemVerilog

A high-speed serial link loses its eye to channel loss, reflections and noise.
Receivers usually clean the signal up with a linear feed-forward equalizer (FFE)
and a decision-feedback equalizer (DFE). Those are tuned for one channel and one
data rate. This design swaps them for a small recurrent neural network. The
received samples pass through a sliding window into a long short-term memory
(LSTM) layer. The layer's own state gives it feedback over past symbols. A single
sigmoid neuron turns the hidden state into an equalized sample, and a short FIR
filter smooths it. The network is trained offline, so all behaviour lives in the
weights. Moving to a new channel or data rate means loading new parameters; the
hardware does not change.

The RTL implements the forward (inference) path of that equalizer. One received
sample goes in per clock, one equalized sample and one decided bit come out per
clock, and every parameter can be loaded through a simple write bus.

## Data path

```
 sample_in ─► signal_delay ─► lstm_layer 0 ─► dropout 0 ─► … ─► lstm_layer L-1 ─► dropout L-1
 (Q3.12)     N_DELAY-word      (h,c state)                                             │
             window r_t..                                                               ▼
                                                     eq_bit ◄─ slicer ◄─ fir_filter ◄─ fc_neuron
                                                     eq_out ◄────────────┘            sigmoid(w·h+b)
```

| Module | Role |
|---|---|
| `signal_delay` | Serial-in, parallel-out window. `taps[0]` is the newest sample r_t, `taps[N_DELAY-1]` the oldest. |
| `lstm_layer` | `HIDDEN` copies of `lstm_neuron` evaluated in parallel, plus the h and c state registers and the layer's `lstm_param_mem`. |
| `lstm_neuron` | One hidden unit: four gate dot products, activations, cell update. Combinational. |
| `lstm_param_mem` | Register array that holds one layer's W, R and b, all readable at once. |
| `sigmoid_pwl`, `tanh_pwl` | Shift-and-add activation functions. |
| `dropout_layer`, `rng_lfsr` | Per-channel random gating between layers, using LFSRs and comparators. |
| `fc_neuron` | Output neuron: y = sigmoid(w·h + b). |
| `fir_filter` | Direct-form post filter with loadable taps. |
| `lstme_top` | Wires all of the above together, decodes the parameter bus and slices the output at 0.5. |
| `lstme_pkg` | Number format, saturation and multiply helpers, gate order, address map. |

Default parameters: `N_DELAY = 15`, `HIDDEN = 20`, `LAYERS = 1`, `FIR_TAPS = 5`.
A 15-sample window into 20 hidden cells is the size reported as enough for a
50 Gb/s PCB channel. Setting `LAYERS > 1` gives the stacked ("deep") variant
meant for variable data rates. Each extra layer takes the previous layer's
dropout-gated hidden vector as input.

### Timing

* Every stage advances only on its own input-valid signal. Idle cycles leave the
  window, the LSTM state and the filter history untouched.
* `out_valid` comes `LAYERS + 3` cycles after `sample_valid`: one cycle for the
  window, one per layer, one for the fully connected neuron and one for the FIR
  filter. `eq_out` is registered. `eq_bit` is a comparator on `eq_out`.
* Throughput is one sample per clock. The LSTM recurrence has to close in a single
  cycle, because step t+1 needs h_t. The layer therefore has no pipeline
  registers inside it. Its critical path runs through a 36-term dot product, a
  sigmoid, two multiplies, a tanh and a final multiply.

## The LSTM step in fixed point

This is the part of the design that most needs explaining. For each hidden unit
u and each gate q ∈ {i, f, g, o}:

```
z_q  = Σ_k W_q[u][k]·x[k] + Σ_j R_q[u][j]·h_{t-1}[j] + b_q[u]
i = σ(z_i)   f = σ(z_f)   g = tanh(z_g)   o = σ(z_o)
c_t[u] = f·c_{t-1}[u] + i·g
h_t[u] = o·tanh(c_t[u])
```

**Number format.** Every word is 16-bit signed Q3.12, so the range is −8 … +7.9998
and one LSB is 1/4096. A 16×16 product is kept at full 32-bit width. Dot products
are summed in a 40-bit accumulator, so 36 terms cannot overflow. The bias is
shifted up to product scale before it is added. After the sum, the result is
shifted back by 12 bits (truncating toward −∞) and saturated to 16 bits. The cell
state is also saturated, to ±8. All of this is set in `lstme_pkg` (`DW`, `FW`,
`ACCW`).

**Activations.** `sigmoid_pwl` is a four-segment piecewise-linear sigmoid. Its
slopes are powers of two, so it needs only shifts, adds and comparisons:

| \|x\| | sigmoid(\|x\|) |
|---|---|
| ≥ 5 | 1 |
| 2.375 … 5 | \|x\|/32 + 0.84375 |
| 1 … 2.375 | \|x\|/8 + 0.625 |
| 0 … 1 | \|x\|/4 + 0.5 |

For negative x it returns 1 − sigmoid(\|x\|). The maximum error against the true
sigmoid is 0.019. The curve steps down by 0.004 at \|x\| = 2.375.
`tanh_pwl` uses the identity tanh(x) = 2·sigmoid(2x) − 1, so its maximum error
is 0.038. For exact-shape activations, replace these two modules, for example with
a lookup table. No other module depends on how they work inside.

**Cost.** At the default size, one time step takes 4·20·(15+20) = 2800
multiply-accumulates, plus 3 multiplies per unit for the cell update. All of them
run in the same cycle. The parameter store is 2880 words × 16 bits = 46 kbit of
flip-flops. It has to be flip-flops and not an SRAM, because every word is read
in every cycle.

## Parameters and how to load them

A trained network is written word by word through `param_we / param_addr /
param_wdata`. `param_addr[15:12]` selects the target:

| Region | Target | Word offset `param_addr[11:0]` |
|---|---|---|
| 0 … 13 | LSTM layer 0 … 13 | `(gate·HIDDEN + unit)·(N_IN + HIDDEN + 1) + k` |
| 14 | output neuron | `0 … HIDDEN-1` = w, `HIDDEN` = b |
| 15 | FIR filter | `0 … FIR_TAPS-1` = b[k] |

Within a layer, `gate` is 0 = input, 1 = forget, 2 = cell candidate, 3 = output.
For each unit, `k` runs over the N_IN input weights, then the HIDDEN recurrent
weights, then the bias. N_IN is `N_DELAY` for layer 0 and `HIDDEN` for every
later layer. A layer must fit in 4096 words: 4·HIDDEN·(N_IN+HIDDEN+1) ≤ 4096.

Reset sets all weights to 0. It sets the FIR filter to pass-through (b[0] = 1,
all other taps 0). The intended sequence is: reset, load every word, pulse
`state_clear` (h = c = 0), then stream samples. `state_clear` does not clear the
sample window.

## Dropout and stacking

Each LSTM layer is followed by a `dropout_layer`. For every feature channel, a
16-bit random number from that channel's own LFSR is compared with `drop_ratio`.
The channel is kept when the number is ≥ `drop_ratio`, and a dropped channel is
forced to zero, so the drop probability is `drop_ratio`/65536. All LFSRs step
once per layer time step. `drop_en = 0` turns dropout off, which is how a trained
equalizer normally runs. With it off, the layer passes data straight through.
Kept channels are not rescaled by 1/(1−p). If the weights come from training that
used inverted dropout, fold that factor into the next layer's weights.

## What is this design's own choice

The algorithm is well defined: LSTM gates, h/c feedback, a sigmoid output
neuron, an FIR post filter, a SIPO window, RNG/comparator/AND dropout, and a
15-by-20 size for the 50 Gb/s case. Nearly every implementation detail was left
open and had to be chosen here:

* the Q3.12 format, the 40-bit accumulator, truncation and saturation;
* the piecewise-linear sigmoid and the tanh built from it;
* the gate order i, f, g, o, the word layout and the parameter address map;
* a register-array parameter store, written once and then only read;
* the FIR tap count (5), its reset to pass-through, and the 0.5 decision threshold;
* one LFSR per dropout channel, the direction of the comparison, and the
  `drop_en` switch;
* a dropout layer after the last LSTM layer as well, transparent when disabled;
* LAYERS = 1 as the default, since no layer count is given for the deep variant.

Two points in the source description disagree with each other:

* The parameter memory is called both a ROM and a RAM. It is built as a loadable
  register array, which covers both readings.
* The output neuron is said to read the hidden state in most places and the cell
  state in one. It reads the hidden state, as the data-flow diagram does.

The formula for h_t is printed with an ambiguous symbol. It is implemented as
o·tanh(c), as in the cell diagram.

Not part of the RTL: the analog sample-and-hold/ADC ahead of `sample_in`, the
clock source, the transmitter and the channel. The design also does no training:
the weights must come from an offline backpropagation run, for example MSE loss
with Adam. No weights were published, so this RTL has not been checked against
the published eye diagrams. It has only been checked against a bit-independent
reference of the same arithmetic.

## Reaching line rate

The 50 Gb/s case uses a delay resolution of 5 ps, which is 200 Gsample/s. One
sample per clock cannot reach that with a single copy at any realistic clock.
Reaching it would take many copies running on interleaved sample phases, or an
analog implementation of the same network. Neither is attempted here.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/lstme_ref_pkg.sv` restates
the arithmetic with `real` numbers: the sigmoid segment table, tanh through the
sigmoid identity, one LSTM unit step, the output neuron, and Q3.12 conversion.
Testbenches compare the hardware against it within a tolerance of a few
quantisation steps.

| Testbench | What it shows |
|---|---|
| `tb_signal_delay` | window contents and taps_valid over 400 samples with gaps |
| `tb_sigmoid_pwl`, `tb_tanh_pwl` | error ≤ 0.021 / 0.042 against exp-based formulas over the whole input range; range; monotonicity; symmetry |
| `tb_lstm_param_mem` | reset, write/read-back of all 2880 words, out-of-range writes ignored |
| `tb_lstm_neuron` | 600 random steps, including saturated gates |
| `tb_lstm_layer` | full 15×20 layer over 300 cycles: state recursion, hold on idle, state_clear, 1-cycle latency |
| `tb_rng_lfsr` | sequences against a polynomial model; period 65535 |
| `tb_dropout_layer` | pass-through when disabled, per-channel decisions, drop rate 0.25/0.5 |
| `tb_fc_neuron`, `tb_fir_filter` | outputs against the reference; valid timing |
| `tb_lstme_top` | whole equalizer at default size. Runs 600 channel-model samples through parameter load, dropout off/on and state clear. Checks every output value, its `LAYERS+3` latency and `eq_bit`, and counts that each mechanism happened. |
| `tb_lstme_deep` | the same test on a two-layer stack (8-sample window, 10 hidden units) |

To run one, for example the full-size test, with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb \
  rtl/lstme_pkg.sv tb/lstme_ref_pkg.sv tb/tb_lstme_top.sv --top-module tb_lstme_top
./obj_dir/Vtb_lstme_top
```

The full-size test builds in under a minute and runs in about a second.
Synthesis is much slower, because of the 2800 parallel multipliers.
