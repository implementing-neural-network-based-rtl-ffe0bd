# biLSTM+CNN nonlinear equalizer for a coherent optical receiver — SystemVerilog RTL

Over a long fibre link, a coherent 16QAM signal is distorted in two ways. Chromatic dispersion is
linear. The Kerr effect is nonlinear and mixes each symbol with its neighbours. The standard
receiver DSP removes the linear part. This design is a small neural network placed after that
DSP. It sees a window of 81 soft symbols and returns cleaned values for the 61 symbols in the
middle of the window.

The network is the biLSTM+CNN equalizer of Freire et al., *Implementing Neural Network-Based
Equalizers in a Coherent Optical Transmission System Using Field-Programmable Gate Arrays*. That
work produced its FPGA build from C++ through high-level synthesis and gives the structure, the
sizes and the arithmetic, but no RTL. The RTL here is a hand-written version of the same
structure. Section "What follows the publication and what does not" separates the two.

```
 81 x {XI,XQ,YI,YQ}         forward LSTM (35)  ─┐
 ─────────────────► input ──►                    ├─► hidden-state ──► Conv1D, 2 filters ──► 61 x {XI,XQ}
   load port        buffer  backward LSTM (35) ─┘    memory [81,70]    21 taps, no padding     output
```

The outputs are I and Q of the X polarisation. A Y-polarisation equalizer would be a second
instance with its own weights. Consecutive windows overlap by 20 symbols (81 − 61). Cutting the
stream into windows is left to whoever drives the core.

## Files

| file | contents |
|---|---|
| `rtl/nn_pkg.sv` | sizes, fixed-point type and multiply, load-port record, all activation coefficient tables |
| `rtl/act_pwl.sv`, `rtl/act_taylor.sv`, `rtl/act_lut.sv` | the three activation approximators |
| `rtl/act_func.sv` | one activation unit: the chosen approximator |
| `rtl/act_coef_mem.sv` | activation coefficient memory shared by all activation units |
| `rtl/lstm_mm.sv` | LSTM stage 1: matrix–vector product, with the weight memory |
| `rtl/act_stage.sv` | LSTM stage 2: sigmoid/tanh of all gate pre-activations |
| `rtl/lstm_elementwise.sv` | LSTM stage 3: cell-state and hidden-state update |
| `rtl/lstm_cell.sv` | one LSTM direction: the three stages, buffers and recurrent state |
| `rtl/bilstm_layer.sv` | both directions, the sequencer and the hidden-state memory |
| `rtl/conv1d_out.sv` | output convolution and output registers |
| `rtl/nn_equalizer_top.sv` | the equalizer: input buffer, layers, control |
| `tb/ref_pkg.sv` | bit-exact reference model used by all testbenches |
| `tb/tb_*.sv`, `tb/eq_harness.sv` | self-checking testbenches |

## Number format

Every value is a 32-bit two's-complement fixed-point number: inputs, weights, biases, gate values,
cell and hidden states. The published design used int32 for inputs and weights. Here the word
has 16 fractional bits, so 1.0 = 65536 and the range is ±32768.

A product of two words is formed at 64 bits, shifted right arithmetically by 16 and truncated to
32 bits (`nn_pkg::fx_mul`). Sums wrap at 32 bits, as C `int` arithmetic would. Nothing saturates
except the activation functions themselves. Weights must therefore be scaled so that the
pre-activations stay inside ±32768. With trained weights they stay within a few units.

## One LSTM direction: three stages around a feedback loop

This is the part of the design that sets its speed. Each direction computes, at every time step
t (σ is the sigmoid, φ is tanh, ⊙ is the element-wise product):

```
i = σ(W_i x_t + U_i h_(t-1) + b_i)     f = σ(W_f x_t + U_f h_(t-1) + b_f)
o = σ(W_o x_t + U_o h_(t-1) + b_o)     c~ = φ(W_c x_t + U_c h_(t-1) + b_c)
c_t = f ⊙ c_(t-1) + i ⊙ c~             h_t = o ⊙ φ(c_t)
```

`lstm_cell` splits this into three stages. Each stage writes a buffer that the next one reads.

1. **Matrix multiplication (`lstm_mm`).** The four gates have 35 units each, giving 140 rows.
   Each row has 4 weights for x_t and 35 for h_(t−1), held side by side as one 140 × 39 matrix W'.
   The 39 input values are sampled into a register vector v at `start`.
   - There are 140 multiply–accumulate cells, one per row.
   - In cycle k every cell receives v[k] and its own element of column k of W'.
   - The weight memory is organised by column, so a whole column is read each cycle.
   - The accumulators start from the bias and finish after 39 cycles.
   - The accumulators themselves are the "result of MM" buffer.
   - The publication names a systolic array for this product but not its shape. Only one
     vector is in flight, because the next one depends on this step's result. A chained
     systolic row, passing v from cell to cell, would only add 139 cycles of skew to every
     step. The input is therefore broadcast to all cells at once.
2. **Activation (`act_stage`).** 140 activation units work in parallel: sigmoid on the i, f and o
   rows, tanh on the c~ rows. Their results are registered into the gate buffers after one cycle.
3. **Element-wise (`lstm_elementwise`).** In the first cycle, c_t is computed and registered. In
   the second cycle, tanh(c_t) goes through 35 more activation units and h_t is registered.

The cell keeps h and c in state registers. These feed stage 1 and stage 3 of the next step. Step
t+1 cannot start its matrix product until h_t exists, so the stages of one step never overlap with
those of the next. This recurrence is why an LSTM equalizer is slower than a feed-forward one of
similar size. One step takes `NX+NH+5` = 44 cycles from `step` to `done`.

Row order inside each 140-row vector: rows 0–34 are i, 35–69 are f, 70–104 are o and 105–139 are
c~.

## Bidirectional layer and hidden-state memory

`bilstm_layer` drives two `lstm_cell` instances with the same `step` pulse. In sequencer step t
the forward cell reads symbol t and the backward cell reads symbol 80−t. Both cells are cleared
(h = c = 0) at the start of each window.

When a step finishes, the two hidden vectors go into the hidden-state memory:
- the forward vector to row t, channels 0–34;
- the backward vector to row 80−t, channels 35–69.

At the end of the window each row of this memory is the 70-channel concatenated feature of one
symbol. The memory has one registered read port, which reads a full row per cycle. In the FPGA
build of the published design this storage was block RAM.

Sequencing costs two cycles per step on top of the cell's 44. The layer therefore takes
81 × 46 + 1 = 3,727 cycles.

## Output convolution

`conv1d_out` applies two linear filters, one for XI and one for XQ. Each filter has 21 taps over
the 70 channels and no padding:

```
y[j][f] = b[f] + Σ_{k<21} Σ_{ch<70} w[f][k][ch] · hs[j+k][ch],   j = 0..60
```

Output j corresponds to input symbol j+10. Outputs 0..60 therefore cover symbols 10..70 of the
window, which is why 61 symbols come out of 81.

The unit runs through (j, k) and reads hidden-state row j+k once per cycle. It multiplies that row
by tap k of both filters, using 140 multipliers and an adder tree. After 21 reads one output pair
is complete and is written to the output register array `y`. The whole layer takes
61 × 21 + 2 cycles.

## Activation-function approximations

tanh and sigmoid are not computed exactly. Each activation unit (`act_func`) contains one of three
approximators, chosen by the `APPROX` parameter. Each approximator takes x and a coefficient set
and returns the approximation ŷ. The coefficients are not built into the units. They come from the
coefficient memory (`act_coef_mem`), which holds one set for the sigmoid and one for the tanh and
serves all 350 units.
- At reset it takes the published sets given below, so loading it is optional.
- Writing it through the load port changes the approximation without rebuilding the design, for
  example after retraining with a different approximation.
- Only the kind selected by `APPROX` is stored.

**Piecewise linear (`act_pwl`, default).** The coefficients are a list of breakpoints and a
slope/intercept pair per segment. The segment index is the number of breakpoints that x exceeds,
so each segment is open below and closed above. One multiplier and one adder produce
ŷ = slope·x + intercept. The tables for 3, 5, 7 and 9 segments are the published ones. The
3-segment pair, the default, is:

| | tanh | sigmoid |
|---|---|---|
| top segment | 1 for x > 1.1 | 1 for x > 2.2 |
| middle segment | 0.90909·x for −1.1 < x ≤ 1.1 | 0.22727·x + 0.5 for −2.2 < x ≤ 2.2 |
| bottom segment | −1 for x ≤ −1.1 | 0 for x ≤ −2.2 |

These coefficients were chosen by a search for the best equalizer quality with the trained weights, not for the closest
fit to the curve. Some published 9-segment rows are discontinuous at their breakpoints:
- the tanh segments 0.269382·x ± 0.09185;
- the sigmoid segment 0.182242·x + 0.09185 on (0.8, 1.5];
- the sigmoid rows below −0.8, whose slopes do not mirror those above +0.8.

They are used exactly as published. Check them against your own training before relying on the
9-segment sigmoid.

**Taylor series (`act_taylor`).** This evaluates the odd series of tanh (x − x³/3 + 2x⁵/15 −
17x⁷/315 + 62x⁹/2835) or of sigmoid (½ + x/4 − x³/48 + x⁵/480 − 17x⁷/80640 + 31x⁹/1451520). The
order can be 1 to 9, and the polynomial is evaluated in Horner form over x². Outside (−a, a) the
output is clamped to −1/+1 for tanh and 0/+1 for sigmoid. The clamp points are a_t = 1.0 and
a_σ = 2.0. This is a choice of this RTL: the published values came from a search and are not known.

At 16 fractional bits, the highest sigmoid coefficients are only one or two LSBs. The 9th-order
sigmoid therefore differs from the exact series by up to about 0.005 near |x| = 2.

**Look-up table (`act_lut`).** The table has 2^BITS levels spread evenly over [−4, 4]. The unit
picks the level nearest to x and returns the stored f(level). Because the range is a power of two,
the level index needs no divider:

```
k = ((x + 4) · (2^BITS − 1) + 4) >> 19
```

Here x and the constant 4 are raw Q16 words (4.0 = 2^18), and k is clamped to 0..2^BITS−1.

The reset contents of the table are computed at elaboration as `f(−4 + k·8/(2^BITS−1))`
(`nn_pkg::lut_entry`), so no data file is needed. Each function's table has 2^BITS words and is
shared by all units. Every unit still needs its own 2^BITS-way read multiplexer, and this sets
the cost of wide tables.

The same approximation, with the tanh variant, is used for the tanh of c_t in stage 3.

## Loading weights and data

Everything enters through one write port, `cfg` (type `nn_pkg::cfg_wr_t`), one 32-bit word per
cycle. It must not be used while `busy` is high.

| `sel` | `row` | `col` | word |
|---|---|---|---|
| `SEL_LSTM_FWD` / `SEL_LSTM_BWD` | gate row 0..139 (i, f, o, c~ × 35) | 0..3: W, 4..38: U, 39: bias | LSTM weight of that direction |
| `SEL_CONV` | f·21 + k (0..41) | channel 0..69 | output weight w[f][k][ch] |
| `SEL_CONV` | 42 | f (0..1) | output bias b[f] |
| `SEL_INPUT` | symbol 0..80 | 0: XI, 1: XQ, 2: YI, 3: YQ | input sample |
| `SEL_ACT` | bit 7: function (0 sigmoid, 1 tanh); bits 6..0: entry / 128 | entry mod 128 | activation coefficient (optional) |

The coefficient-memory entries are:
- **PWL:** breakpoints 0–7, slopes 8–16, intercepts 17–25, with segments counted from the most
  negative x.
- **Taylor:** a1, a3, a5, a7, a9 at 0–4; c0 at 5; clamp bound at 6; lower and upper clamp values
  at 7 and 8.
- **LUT:** level k at entry k.

A full weight set is 2 × 140 × 40 + 2 × 21 × 70 + 2 = 14,142 words. A window is 324 words. Weights
stay loaded across windows. Only the input buffer needs rewriting for the next window.

## Timing and throughput

Pulse `start` for one cycle with the window in the input buffer. `done` pulses
NSYM·(NX+NH+7) + NOUT·NK + 4 = **5,011 cycles** later. `y` then holds all 61 × 2 results until the
next `start`.

At 270 MHz, the clock reported for the published FPGA build, 5,011 cycles take 18.6 µs. The
published build took 33.4 µs. Its throughput formula, clock × 4 bits × 61, assumes 61 new symbols
every clock. This core delivers 61 symbols per 5,011 cycles, or about 13 Mbit/s per instance at
270 MHz.

Raising the rate needs more hardware, for example:
- interleaving several windows through one cell to fill the idle stages;
- replicating the core.

Neither is part of this RTL. No timing closure has been done, so the achievable clock of this RTL
is unknown.

## What follows the publication and what does not

Taken from the publication:
- **Network shape:** 81 × 4 inputs; biLSTM with 35 units per direction; concatenation to 70
  channels; Conv1D with 2 filters, 21 taps, no padding and a linear output; 61 × 2 outputs.
- **LSTM equations.**
- **LSTM system structure:** matrix-multiply stage, result buffer, activation stage, gate buffers
  with c_(t−1), element-wise stage, and h_t/c_t feedback.
- **Storage:** hidden states are kept in on-chip memory.
- **Arithmetic:** 32-bit integer arithmetic.
- **Activation approximations:** all three families with their published coefficients.
- **Default approximation:** the 3-segment PWL, the variant recommended for hardware.

Choices of this RTL:
- **Number format:** 16 fractional bits, with truncating rescale after each product.
- **Stage 1 array:** one MAC per row with an input broadcast, instead of the systolic array the
  publication names.
- **Parallelism:** all activation units in parallel.
- **Bidirectional layer:** both directions run at once, and the concatenation order is forward
  then backward.
- **Output layer:** the convolution loop order and its parallelism.
- **tanh(c_t):** computed inside stage 3.
- **State reset:** zero initial h and c for each window.
- **Taylor:** the clamp bounds a_t and a_σ.
- **LUT:** the input range and the nearest-level rounding.
- **Interfaces:** the load-port map and the start/busy/done handshake.
- **Coefficient memory:** one shared set per function, and its entry map. The publication only
  says the coefficients are read from memory.

Not included:
- the receiver DSP in front of the equalizer;
- the host that supplies windows and weights;
- training, including retraining with the approximated activations.

## Verification

Every testbench checks against `tb/ref_pkg.sv`. This is a separately written bit-exact model:
- the PWL tables are re-entered in their printed order;
- the LUT index is computed in real arithmetic;
- the LSTM and the convolution are plain loops over dynamic arrays.

| testbench | what it checks |
|---|---|
| `tb_act_pwl` | 3/5/7/9-segment tanh and sigmoid at every breakpoint ±1 LSB and 3,000 random points; every segment reached |
| `tb_act_taylor` | orders 3 and 9, bit-exact and against the real series; clamp values |
| `tb_act_coef_mem` | reset contents through the PWL and LUT units and against the series; 400 random writes, each checked against a model of the entry map |
| `tb_act_lut` | 4- and 8-bit tables, midpoints between levels, out-of-range inputs |
| `tb_act_stage` | sigmoid/tanh row assignment, one-cycle latency, hold without `valid_in` |
| `tb_lstm_mm` | all 20 rows (NH = 5), inputs sampled at `start`, latency NX+NH+1 |
| `tb_lstm_elementwise` | c_t after one cycle, h_t after two |
| `tb_lstm_cell` | 8 recurrent steps, `clear`, 3 more steps, step latency NX+NH+5 |
| `tb_bilstm_layer` | 7-symbol windows, different weights per direction, all rows of the memory, layer latency |
| `tb_conv1d_out` | all outputs of a 10 × 4 input with 3-tap filters, two passes, latency |
| `tb_nn_equalizer_top` | whole equalizer at 12 symbols / 4 units / 4 taps, seven copies, two windows each: PWL-3, PWL-9, Taylor-9 and LUT-8 as reset; PWL-3, Taylor-9 and LUT-4 with the sigmoid and tanh sets swapped through the load port |
| `tb_nn_equalizer_act_sweep` | the same at the remaining precisions: PWL-5, PWL-7, Taylor-1/3/5/7, LUT-3/5/10 |
| `tb_nn_equalizer_full` | whole equalizer at full size, default parameters, two windows |

The end-to-end testbenches do three further things:
- compare every output bit-exactly and check the window latency to the cycle;
- count forward and backward recurrent steps, windows and coefficient-memory writes;
- count how often the PWL units worked in the upper clamp, the lower clamp and a sloped segment.

Each of these counts must be non-zero.

Run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/nn_pkg.sv tb/ref_pkg.sv -y rtl -y tb \
    tb/tb_nn_equalizer_full.sv --top-module tb_nn_equalizer_full
./obj_dir/Vtb_nn_equalizer_full
```

Each testbench ends with `TB_RESULT checks=N failures=M` and has a watchdog. The full-size run
builds in about 15 s and simulates two windows in well under a second.

## Changing the design

- **Approximation:** set `APPROX` to `APPROX_PWL`, `APPROX_TAYLOR` or `APPROX_LUT`. `NSEG`
  (3/5/7/9), `ORDER` (odd, 1..9) and `LUT_BITS` set its precision. All are parameters of
  `nn_equalizer_top` and are passed down to every activation unit.
- **Sizes:** `NSYM_P`, `NH_P` and `NK_P` on the top scale the window, the hidden units and the
  output taps. The load-port fields limit `NH_P` to 63 (row < 256) and the window to 256 symbols.
- **Number format:** change `FRAC` in `nn_pkg` and regenerate the weights to match. The reference
  model in `tb/ref_pkg.sv` assumes 16 fractional bits.
- **Coefficients:** to change them at run time, write the coefficient memory. To change the reset
  values, edit `nn_pkg::pwl_coef`, `taylor_coef` or `lut_entry`.
