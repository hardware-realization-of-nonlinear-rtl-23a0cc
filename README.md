# A biLSTM + CNN optical equalizer with piecewise-linear activations

Coherent optical receivers can undo much of the fibre's nonlinear distortion
with a small neural network placed after the conventional DSP. The network
used here is a bidirectional LSTM followed by a linear 1-D convolution. Its
costly parts in hardware are the sigmoid and tanh inside every LSTM gate,
because both contain exponentials. This design replaces them with
piecewise-linear (PWL) approximations. Each function becomes a handful of
straight segments. Only the segment coefficients are stored, and an
evaluation costs a few comparisons, one multiply and one add. The network is
then retrained with the approximations in place, so that it compensates for
their error. With that retraining, even 3 segments (the "hard sigmoid" and
"hard tanh") come within about 0.1 dB Q-factor of the exact functions.
3 segments is therefore the default here.

The RTL computes the whole equalizer on one window of received symbols:

| stage | shape | what it does |
|---|---|---|
| input | 81 x 4 | symbols of both polarisations: XI, XQ, YI, YQ |
| forward LSTM | 81 x 35 | 35 hidden units, t = 0 to 80 |
| backward LSTM | 81 x 35 | 35 hidden units, t = 80 to 0 |
| 1-D convolution | 61 x 2 | kernel 21, 70 input channels, no padding, 2 filters, no activation |
| output | 61 x 2 | equalized XI, XQ of the X polarisation |

These sizes, the 3/5/7/9-segment options and the use of PWL functions come
from the published description of this equalizer. That description does not
describe the hardware that runs the network. The number format, the
schedule, the memories and the interfaces below are this implementation's
own choices. The last sections list them.

## 1. Piecewise-linear activations

### Table format

A PWL function with `SEG` segments is held as `SEG` records
(`eq_pkg::pwl_seg_t`), each made of three 16-bit words:

| field | meaning |
|---|---|
| `lo` | lower breakpoint: the segment applies for `lo[s] <= x < lo[s+1]` (ignored for s = 0) |
| `slope` | slope of the segment |
| `icpt` | value of the segment's line at x = 0 |

`pwl_eval` finds the highest `s` with `x >= lo[s]` by comparing `x` with all
breakpoints at once, then returns

    y = sat( floor(slope[s] * x / 4096) + icpt[s] )

The breakpoints must be ascending. The block is combinational. At
`SEG = 3` it synthesizes to about 40 word-level cells: two comparators, one
16x16 multiplier, an adder and the saturation logic.

### The default functions

`pwl_coef_mem` holds one table in registers. After reset the two tables are:

| function | segment 0 | segment 1 | segment 2 |
|---|---|---|---|
| hard tanh | x < -1: y = -1 | -1 <= x < 1: y = x | x >= 1: y = 1 |
| hard sigmoid | x < -2: y = 0 | -2 <= x < 2: y = x/4 + 1/2 | x >= 2: y = 1 |

The hard sigmoid's middle segment is the tangent of the sigmoid at zero.
Both slopes (1 and 1/4) are powers of two. A build that fixed the tables
at these values would need no multiplier, only shifts. Here the tables stay
writable, so the multiplier is kept. The breakpoints are
this design's choice. The source only draws the 3-segment curves. It prints
the output levels (0/1 and -1/1) but not the positions of the knees, which
lie near +-1.1 (tanh) and +-2.2 (sigmoid) by eye.

### Loading other coefficients

Every coefficient can be rewritten at run time. This covers retrained
3-segment fits and tables with more segments. Set `SEG` to 5, 7 or 9 to get
the other evaluated sizes. The 5/7/9-segment reset table is the same hard
function, cut into collinear pieces. Real 5/7/9-segment fits must be
loaded, and their coefficients come from whatever fitting and retraining
flow produced the network weights. `tb_pwl_eval` shows one simple choice:
chords of tanh and sigmoid between equally spaced knots on [-xm, xm], with
xm = 2 + SEG/4, and constant outer segments. With those tables, the worst
error against the exact function measured in Q3.12 is:

| segments | 3 | 5 | 7 | 9 |
|---|---|---|---|---|
| tanh | 0.404 | 0.098 | 0.102 | 0.094 |
| sigmoid | 0.079 | 0.043 | 0.026 | 0.017 |

Uniform chords are not optimal fits, which is why tanh does not improve from
5 to 7 segments. The point of the design is that retraining makes these
errors matter little.

The same segment count is used for sigmoid and tanh. Both LSTM directions
share the two tables. Each `lstm_cell` evaluates five PWL functions per
unit update: three sigmoids, the candidate tanh and tanh of the new cell
state.

## 2. Number format

Every activation, weight, bias and coefficient is a 16-bit two's-complement
number with 12 fraction bits (Q3.12: range [-8, 8), step 1/4096). Products
are summed at full precision in 40-bit accumulators. A sum is brought back
to Q3.12 by an arithmetic shift right by 12, which rounds toward minus
infinity, and is then saturated to [-8, 8 - 2^-12] (`eq_pkg::rescale`).
The reference models in the testbenches use the same definition, written
with division rather than shifts. All results are bit-exact against them.
To change the format, edit `DATA_W`, `FRAC` and `ACC_W` in `rtl/eq_pkg.sv`.

## 3. The LSTM engines

`lstm_dir` computes one direction. Two instances run side by side: the
forward one (`REVERSE = 0`) and the backward one (`REVERSE = 1`). For each
time step t and each unit j it forms the four gate pre-activations

    pre_g[j] = sum_k W_g[j][k] * v[k],   v = (x_t[0..3], h_{t-1}[0..34], 1.0),   g in {i, f, g, o}

and then updates the unit in `lstm_cell`:

    i = sig(pre_i)   f = sig(pre_f)   g = tanh(pre_g)   o = sig(pre_o)
    c_j <- sat(floor((f*c_j + i*g) / 4096))
    h_j <- sat(floor((o * tanh(c_j)) / 4096))

Schedule:

* The engine handles one unit at a time, with four multiply-accumulate
  lanes, one per gate. They consume one column k of the weight matrix per
  clock, 40 columns in all: 4 inputs, 35 recurrent inputs and the bias,
  which is multiplied by 1.0.
* The weight memory has four banks, one per gate. Each holds 35 x 40 words,
  stored row by row (`j*40 + k`). Each bank is a synchronous-read
  `seq_ram`, so the lanes have a two-stage pipeline: issue the address,
  then accumulate.
* Each unit takes 40 issue cycles + 1 pipeline drain + 1 cell stage +
  1 write-back = 43 cycles. A time step takes 35 x 43 = 1,505 cycles and a
  window 81 x 1,505 = 121,905 cycles. In general it is `SEQ*H*(IN+H+4)`.
* The recurrent state is double-buffered. The new h values of a step
  collect in `h_nxt` and become `h_{t-1}` only when all 35 units are done.
  c is updated in place, since each unit reads only its own c.
* h and c are cleared at the start of every window: each window is a
  separate sequence.
* Each new h_j goes out on `h_we/h_t/h_j/h_data` into the direction's
  81 x 35 hidden-state buffer.

## 4. The convolution engine

`cnn1d` computes, for every output position p = 0..60 and filter f = 0..1,

    y_f[p] = sat(floor((sum_{k<21} sum_{ch<70} W_f[k][ch] * h[p+k][ch] + b_f * 4096) / 4096))

Channels 0..34 are the forward hidden states and 35..69 the backward ones.
One MAC lane per filter consumes one (tap, channel) pair per clock, in tap
order, followed by the bias. Each weight bank holds `k*70 + ch` for the
weights and word 1470 for the bias. One position takes 21 x 70 + 3 = 1,473
cycles and a window takes 61 x 1,473 = 89,853 cycles. The layer is linear,
as in the source: its output goes straight out.

## 5. Top level: `bilstm_cnn_eq`

The top processes one window at a time, in four phases:

1. **Load.** `in_ready` is high, and 81 symbols are taken on
   `in_valid && in_ready` into the 81 x 64-bit input buffer. That buffer has
   two read ports, one per LSTM engine.
2. **LSTM.** Both engines start together. The phase ends when both have
   signalled `done`.
3. **CNN.** `cnn1d` reads both hidden-state buffers and writes the 61
   results into the output buffer.
4. **Drain.** The results leave on `out_valid/out_ready`. `out_sym` holds
   still while `out_valid && !out_ready`; an assertion checks this. After
   the 61st symbol the top returns to Load.

`busy` is high outside Load. From the last accepted input symbol to the
first offered output symbol takes 121,905 + 89,853 + 6 = 211,764 cycles.
Draining then takes 61 cycles when `out_ready` stays high. The engines run
one after the other, so each is idle for part of the window. That keeps the
design simple. A pipelined version would overlap the CNN of one window with
the LSTMs of the next, at the cost of a second set of hidden-state buffers.

### Configuration bus

`cfg` (`eq_pkg::cfg_t`) writes one 16-bit word per clock. It may only be
used during Load (asserted), that is, between windows.

| `cfg.sel` | `cfg.bank` | `cfg.addr` |
|---|---|---|
| `CFG_LSTM_FWD`, `CFG_LSTM_BWD` | gate: 0 i, 1 f, 2 g, 3 o | `unit*40 + k`; k 0..3 input weights, 4..38 recurrent weights, 39 bias |
| `CFG_CNN` | filter: 0 XI, 1 XQ | `tap*70 + channel`; 1470 is the bias |
| `CFG_PWL_SIG`, `CFG_PWL_TANH` | 0 breakpoint, 1 slope, 2 intercept | segment |

The weights come from offline training with the PWL functions in place:
first train with the exact functions, then retrain after the swap. The
design only stores them.

### Storage at the defaults

| memory | words x bits |
|---|---|
| input buffer | 81 x 64 |
| LSTM weights, per direction | 4 x 1,400 x 16 |
| hidden-state buffers | 2 x 2,835 x 16 |
| CNN weights | 2 x 1,471 x 16 |
| output buffer | 61 x 32 |
| PWL tables | 2 x 3 x 48 bits (registers) |

In total about 324 kbit of memory and 4.3 k flip-flops, most of them the
LSTM h and c registers.

## 6. Parameters

All modules take their defaults from `eq_pkg`: `SEQ = 81`, `IN = 4`,
`H = 35`, `KS = 21`, `NF = 2`, `SEG = 3`. The output length is
`SEQ - KS + 1`. The block testbenches shrink these sizes. The top-level
testbench uses the defaults.

## 7. Choices not taken from the source

* Everything in sections 2 to 5: the Q3.12 format and rounding, the serial
  MAC schedules and their cycle counts, the memory organisation, the
  window-at-a-time sequencing, the valid/ready streams, the configuration
  bus and the asynchronous active-low reset.
* The 3-segment breakpoints (+-1 for tanh, +-2 for sigmoid), explained in
  section 1.
* The LSTM is the standard one without peepholes, with gate order i, f, g, o
  and no state carried from one window to the next.
* The slope is applied with a multiplier. The source reports that its PWL
  tanh used no DSP slices on its FPGA. It also notes that the multipliers
  could be removed altogether by rewriting the slopes as shift-and-add. That
  shift-and-add form is not built here. With the reset tables every slope
  is a power of two anyway.
* Resource figures are not comparable with the source's FPGA numbers
  (203 LUT and 34 FF for its 3-segment tanh). Those numbers are for a
  standalone tanh on a specific FPGA with its own word width.
* The equalization quality (Q-factor) cannot be checked in simulation
  without trained weights and transmission data. The testbenches use random
  weights and check bit-exactness against the reference arithmetic instead.

## 8. Files

| file | content |
|---|---|
| `rtl/eq_pkg.sv` | sizes, number format, `pwl_seg_t`, `cfg_t`, saturation helpers |
| `rtl/pwl_eval.sv` | PWL evaluator |
| `rtl/pwl_coef_mem.sv` | PWL coefficient registers with hard-function reset |
| `rtl/lstm_cell.sv` | gate activations and c/h update of one unit |
| `rtl/lstm_dir.sv` | one LSTM direction: weight banks, 4 MAC lanes, sequencing |
| `rtl/cnn1d.sv` | convolution engine with its weight banks |
| `rtl/seq_ram.sv` | synchronous-read memory with several read ports |
| `rtl/bilstm_cnn_eq.sv` | top level |
| `tb/eq_ref_pkg.sv` | integer reference arithmetic shared by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_eq_segments` for the segment sweep |

## 9. Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops. Each has a
watchdog that counts a failure if the run hangs. For example, with Verilator
5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/eq_pkg.sv tb/eq_ref_pkg.sv tb/tb_bilstm_cnn_eq.sv \
        --top-module tb_bilstm_cnn_eq
    ./obj_dir/Vtb_bilstm_cnn_eq

Replace the testbench name to run another one. What each checks:

* `tb_pwl_eval`: every 16-bit input through the hard tanh and hard sigmoid
  against their closed forms. Then 3/5/7/9-segment chord fits against the
  table formula, with the error falling as segments are added.
* `tb_pwl_coef_mem`: the reset tables, coefficient writes, ignored
  out-of-range writes and re-reset.
* `tb_seq_ram`: one-cycle read latency on three ports, and read-old-data on
  a collision.
* `tb_lstm_cell`: random pre-activations spread over all segments and into
  saturation, against the reference cell, with one-cycle latency.
* `tb_lstm_dir`: forward and reverse engines at SEQ = 6, H = 5 against a
  reference LSTM, checking the exact `SEQ*H*(IN+H+4)` cycle count and that
  every (t, j) is written once.
* `tb_cnn1d`: a small convolution against a reference, checking its cycle
  count.
* `tb_bilstm_cnn_eq`: the full-size top. It runs three windows against a
  reference of the whole network and takes about a second in Verilator. It
  includes a window offered while the previous one is still in flight
  (input stall), random output back-pressure, and a rewrite of both
  activation tables and the LSTM weights between windows. It checks that
  each mechanism occurred, and that every segment of both functions was
  used. It also checks the 211,764-cycle latency.
* `tb_eq_segments`: four full-size copies of the top with `SEG` = 3, 5, 7
  and 9. They share the same random weights and input window. The 5/7/9
  copies are loaded with the chord fits above. Each copy is checked
  bit-exactly. The test also measures how far each output lies from a
  floating-point model with the exact sigmoid and tanh and the same weights,
  that is, without retraining. One run gave these RMS distances (Q3.12
  outputs):

  | segments | 3 | 5 | 7 | 9 |
  |---|---|---|---|---|
  | RMS distance | 0.196 | 0.086 | 0.054 | 0.041 |

  As expected for an unretrained network, the distance shrinks as segments
  are added. Retraining, which is what makes 3 segments sufficient, happens
  offline and is outside this RTL.
