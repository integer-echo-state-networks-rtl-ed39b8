# Integer Echo State Network accelerator

An Echo State Network (ESN) is a recurrent network whose recurrent part, the
*reservoir*, is random and never trained: only a linear readout on top of the
reservoir state is learned. A conventional ESN keeps a vector of floating-point
neuron activations, multiplies it every time step by a dense random matrix and
squashes the result with `tanh`. That costs N² multiplications and 32 bits per
neuron.

The integer ESN (intESN) keeps the same three layers but replaces every
expensive part of the reservoir with something cheap, using ideas from
hyperdimensional computing:

* the input is not multiplied by a projection matrix; each input symbol (or
  quantization level of a continuous value) is looked up in an *item memory*
  that returns a fixed random **bipolar** vector of N elements (+1/−1);
* the recurrent matrix is a **cyclic shift** of the reservoir by one position;
* `tanh` is replaced by **clipping** each neuron to the integer range
  [−κ, +κ], so each neuron needs only ⌈log₂(2κ+1)⌉ bits (3 bits for κ = 3).

One time step is

    x(n) = clip_κ( Sh(x(n−1), 1) + u_hd(n) + y_hd(n−1) )
    y(n) = W_out · x(n)

where `u_hd(n)` is the item-memory vector of the current input and `y_hd(n−1)`
the item-memory vector of the quantized previous output (used only when the
network generates a signal from its own output). The readout `W_out` is
trained off-line exactly as for a conventional ESN (ridge regression on
collected reservoir states) and loaded into the accelerator.

This repository holds synthesizable SystemVerilog for such an accelerator,
sized by default for the configuration that was built on an FPGA: the recall
phase of a sequence-recall task with N = 300 neurons, κ = 3, an alphabet of
D = 27 tokens and L = 27 readout outputs.

## Block diagram

```
             in_u ──► [quantizer Q] ─┐ (cfg_in_quant)
                 └──────────────────►├─► item_memory (D rows) ── u_hd ──┐
                                                                        ▼
 fb_level ◄─ [quantizer Q] ◄─ y_0 ─┐              ┌──────────────────────────────┐
   │   ▲                           │              │ reservoir                    │
   │   └─ [quantizer Q] ◄─ in_teacher (cfg_teacher)│ x ← clip(Sh(x,1)+u_hd+y_hd)  │
   ▼                               │              └──────────────┬───────────────┘
 item_memory (M rows) ── y_hd ─────┼──────────────►              │ x (N × 3 bit)
                                   │                             ▼
                                   │        readout: y = W_out · x  (L MAC lanes)
                                   └──────────── y ──► wta ─► out_token
                    intesn_ctrl sequences each step; cycle_timer counts cycles

 pattern mode (cfg_bundle): u_hd ─► sparse_encoder (key, value) ─► bundler
                             ── integer vector u_int ──► reservoir, in place of u_hd
```

| Module         | Role |
|----------------|------|
| `intesn_pkg`   | default sizes, neuron width function, shared enums |
| `item_memory`  | N-bit-wide table of bipolar vectors, host-written, 1-cycle read |
| `quantizer`    | fixed-point value → level index, `round(QSCALE·v) + OFFSET`, saturating |
| `reservoir`    | N neurons, shift + add + clip for all neurons in one cycle |
| `readout`      | `W_out` RAM and L multiply-accumulate lanes, one neuron per cycle |
| `wta`          | winner-take-all: index of the largest readout output |
| `sparse_encoder` | analog value → which elements of an item vector are kept (ternary vector) |
| `bundler`      | N saturating counters that add up the ternary vectors of one pattern |
| `intesn_ctrl`  | one-step sequencer with valid/ready handshakes |
| `cycle_timer`  | 64-bit cycle counter for measuring run time |
| `intesn_top`   | the accelerator: all of the above wired together |

## The reservoir

Neuron `i` is a signed XW-bit register (XW = 3 for κ = 3). In an update every
neuron computes, in parallel,

    s_i = x_{(i+1) mod N} + (vec_en ? u_int_i : in_en ? ±1 : 0) + (fb_en ? ±1 : 0)
    x_i ← min(κ, max(−κ, s_i))

**Shift direction.** The recurrent matrix W is the permutation matrix with
`W[i][(i+1) mod N] = 1`, so the new value of neuron `i` is the old value of
neuron `i+1` and the last neuron takes neuron 0. A vector added at step `n−d`
therefore sits, d steps later, at positions shifted down by d: element `j` of
the state carries element `(j+d) mod N` of that vector (plus the clipped
interference of everything else). This is what makes a delayed token
decodable by a readout, and it is the one fact the readout training must agree
with. Training software must use the same shift direction.

**Clipping** is the network's only nonlinearity and also its forgetting
mechanism: a neuron that has saturated at ±κ loses the information of older
inputs once a further ±1 pushes it against the bound. κ sets the memory
length (larger κ, longer memory, one more bit per neuron for each doubling).
The reservoir reports how many neurons were clipped in the last update
(`out_clip_cnt`) to make this visible.

`res_clr` (synchronous) and reset (asynchronous, active low) zero every
neuron. A new independent sequence should start with a clear.

## Hypervector tables and quantizers

Both item memories store one N-bit row per symbol; bit j = 1 means element
+1 and bit j = 0 means −1. Rows are written by the host through the load port
and never change while the network runs. The accelerator does not generate
them; the host chooses the mapping:

* **input tokens** (D = 27 rows): independent random vectors. Two random
  bipolar vectors of length N have a dot product near 0 (standard deviation
  √N), which is what lets many of them be superposed in the reservoir;
* **output levels** (M = 101 rows): vectors whose mutual similarity falls
  linearly with the distance between levels. One way, used by the testbench:
  take a random base vector and a random order of the N positions; row k is the
  base with the first ⌊k·N / (2(M−1))⌋ positions of that order inverted, so the
  two extreme levels differ in N/2 positions and are uncorrelated.

The `quantizer` maps a signed fixed-point value v (FRAC = 12 fractional bits)
to `round(QSCALE · v) + OFFSET`, saturated to `[0, LEVELS−1]`, rounding
half-way cases upward. With QSCALE = 100, OFFSET = 50 and 101 levels it maps
−0.5 … +0.5 in steps of 0.01 onto rows 0 … 100, the `round(100·y)/100`
quantization used when the output is fed back. Values outside that range
saturate and raise `out_qsat`. The same block can quantize a continuous input
(`cfg_in_quant`): the input path then uses D levels centred on 0, which at
the defaults covers only ±0.13; a design that feeds continuous inputs should
set D to the number of input levels it needs.

Three quantizer instances exist in the top: the input one, one for the
readout output y₀ (feedback during free-running generation) and one for the
teacher value (feedback during teacher-forced training).

## Analog values: ternary vectors by varying sparsity

A token maps onto one bipolar vector, but an analog quantity such as a pixel
intensity v ∈ [0, 1] does not. Scaling the pixel's vector by v and adding
up the scaled vectors of all pixels would describe an image, but not with
integers, and the reservoir only holds small integers. The pattern mode
scales by *density* instead: each pixel's bipolar vector is thinned out so
that only a fraction v of its elements stay ±1 and the rest become 0. The sum
of these ternary vectors over all pixels (the *bundle*) is an integer vector,
and a readout that correlates the state with pixel p's vector still sees a
contribution proportional to v_p.

`sparse_encoder` decides, for element j of pixel k's vector, whether it is
kept: a 32-bit multiplicative hash of (k, j) is reduced to its top 8 bits
h and the element is kept when h < density, with density = 256·v (0 … 256,
9 bits). The choice is therefore random-looking across positions and pixels,
but fixed: the same pixel at the same value always gives the same vector, and
raising the value only adds elements (a threshold on a fixed hash is
monotone). The hash constants are arbitrary; any well-mixed hash will do, as
long as the software that trains the readout uses the same one.

`bundler` holds N signed 8-bit counters. For each accepted pixel it adds +1,
−1 or 0 per element; counters saturate at ±127 and a sticky flag records it.
With P pixels a counter is a sum of at most P terms, typically about √(P·v̄)
in size, so 8 bits cover a few hundred pixels before saturation matters. The
whole bundle enters the reservoir in one update in place of the ±1 input
vector and is then emptied; the reservoir's clipping bounds the result as
usual. The flag of the bundle that produced an output is returned with it
(`out_bsat`).

The pixel vectors come from the input item memory, so at most D pixels (27 by
default) have their own vector; a real image needs D = pixels × channels and
a much larger N (images were stored with N = 8000 … 64000 and κ = 4 … 11).

## Readout and decoding

`W_out` is stored as N words of L × 16 bits: word j holds the weight of
neuron j for every output. The weights are signed two's complement; the
binary point is the host's choice, but the output quantizer assumes 12
fractional bits (weights and outputs in units of 1/4096). The sums are kept
in 32-bit accumulators, enough for 16-bit weights × 3-bit neurons × 512
neurons without overflow.

A readout run walks the neurons one per cycle: cycle k reads word k and
neuron k, cycle k+1 adds `w[l][k] · x_k` into all L accumulators at once.
`done` rises N + 2 cycles after the cycle in which `start` was high; the
outputs then stay stable until the next start. The readout uses only the
reservoir state, not the input (the input is never part of the trained
readout in the tasks the network was evaluated on).

For token tasks the answer is the index of the largest output (`wta`, ties to
the lower index). Only one readout matrix is held at a time. The sequence
recall task trains one matrix per delay (16 for delays 0–15); switching delay
means rewriting the 300 weight words.

A readout that needs no training, and which the testbench uses, follows from
the shift direction above: to recall the token seen d steps ago, set
`w[l][j] = ±c` with the sign of element `(j+d) mod N` of token l's vector.
This is the hyperdimensional "unshift and compare" decoding; a trained ridge
readout does better for larger d.

## Sequencing, interfaces and timing

Each accepted input sample performs exactly one network step:

| Cycle | State    | Action |
|-------|----------|--------|
| 0     | S_IDLE   | `in_valid && in_ready`: both item memories read (input row, feedback row) |
| 1     | S_UPDATE | reservoir updated, readout started |
| 2 … N+2 | S_READ | readout accumulates; leaves on `done` |
| N+3   | S_OUT    | `out_valid`; held until `out_ready` |
| N+4   | S_IDLE   | next sample can be accepted |

An unstalled step is therefore N + 5 cycles (305 at N = 300).

In pattern mode (`cfg_bundle = 1`) the accepted sample is one pixel and
S_IDLE is followed by S_ACC, in which the pixel's ternary vector is added to
the bundle. Unless the pixel carried `in_last`, the controller returns to
S_IDLE for the next pixel without updating the reservoir and without an
output. After the last pixel it continues with S_UPDATE (reservoir update
with the bundle, bundle cleared) and the rest of the step as above. A pattern
of P pixels takes 2P + N + 3 cycles. At the output
handshake the quantized level of y₀ (or, with `cfg_teacher`, of the
`in_teacher` value sent with the sample) becomes the feedback level of the
next step; reset and `res_clr` set it to the level of y = 0.

Top-level ports:

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `cfg_in_en` | in | 1 | add the input vector (0 for generator tasks without input) |
| `cfg_in_quant` | in | 1 | `in_u` is fixed point and goes through Q; else it is a token index |
| `cfg_fb_en` | in | 1 | add the feedback vector |
| `cfg_teacher` | in | 1 | feedback from `in_teacher` instead of the prediction |
| `cfg_bundle` | in | 1 | pattern mode: samples are pixels, one output per pattern |
| `res_clr` | in | 1 | zero the reservoir, reset the feedback level |
| `ld_we`, `ld_sel`, `ld_addr`, `ld_data` | in | 1, 2, 16, max(N, 16L) | table write: `ld_sel` 0 = input item row, 1 = output item row (N bits), 2 = readout word of neuron `ld_addr` (16L bits) |
| `in_valid`, `in_ready`, `in_u`, `in_teacher` | in/out | 1, 1, 16, 16 | input sample stream |
| `in_density`, `in_last` | in | 9, 1 | pattern mode: pixel value (256 = 1.0), last pixel of the pattern |
| `out_valid`, `out_ready` | out/in | 1 | result stream |
| `out_token`, `out_y`, `out_level`, `out_qsat`, `out_clip_cnt` | out | 5, 32L, 7, 1, 9 | winner, all readout sums, quantized y₀ and its saturation flag, neurons clipped in this step |
| `busy` | out | 1 | a step is in flight |
| `out_bsat` | out | 1 | the bundle of this output's pattern saturated |
| `tm_clr`, `tm_run`, `tm_count`, `tm_ovf` | in/out | 1, 1, 64, 1 | cycle timer |

Configuration and table writes are only legal while `busy` is low (an
assertion checks the table writes). Assertions also check that `out_valid` is
held until taken and that the readout never finishes outside S_READ.

## Operating modes

* **Sequence recall** (`cfg_in_en = 1`, others 0): token index on `in_u`;
  each step adds the token and returns the readout's guess of the token seen
  d steps earlier, both in the same step.
* **Continuous input** (`cfg_in_quant = 1`): `in_u` is a value with 12
  fractional bits, quantized to an input row.
* **Signal generation, training** (`cfg_in_en = 0`, `cfg_fb_en = 1`,
  `cfg_teacher = 1`): the ground truth y(n−1) is sent in `in_teacher` and fed
  back; the host collects reservoir-derived outputs to fit `W_out`.
* **Signal generation, running** (`cfg_teacher = 0`): the network's own
  quantized y₀ is fed back each step, so quantization error accumulates, as
  expected of an integer generator.
* **Patterns / images** (`cfg_bundle = 1`, `cfg_in_quant = 0`): `in_u`
  carries the pixel's item index and `in_density` its value; `in_last` ends
  the pattern. The input is the bundle of the pixels' ternary vectors.

## Parameters

| Parameter | Default | Origin |
|-----------|---------|--------|
| `N` | 300 | largest reservoir built in hardware (100, 200 and 300 were built) |
| `KAPPA` | 3 | clipping threshold of the hardware and recall experiments |
| `D` | 27 | token alphabet of the recall task |
| `L` | 27 | one-hot outputs of the recall task |
| `M` | 101 | levels of round(100·y)/100 for \|y\| ≤ 0.5 (design choice of range) |
| `QSCALE` | 100 | quantization steps per unit of the feedback path |
| `WW`, `AW` | 16, 32 | weight and accumulator widths (design choice) |
| `IW`, `FRAC` | 16, 12 | input width and fractional bits (design choice) |
| `PW`, `BW` | 8, 8 | pixel value resolution, bundle counter width (design choice) |

Other experiments with intESN used larger networks than the default: time
series classification used N = 800 with κ = 7 (4-bit neurons) and N = 6400,
signal generation N = 1000 with κ = 3, analog (image) storage N up to 64000
with κ up to 11. Those need the parameters changed; classification with
several input variables would also need one input path per variable, which is
not built.

## What this RTL adds to, and leaves out of, the published architecture

Taken from the architecture: the three layers, item-memory projection of
input and fed-back output, the quantizers in front of the item memories, the
cyclic-shift recurrence and its direction, clipping to ±κ, neuron width from
κ, a linear readout with winner-take-all decoding, the cycle timer, the
mapping of analog values onto ternary vectors by varying sparsity and their
bundling into an integer input, and the default sizes.

This design's own choices: bit encoding of bipolar elements, fixed-point
formats, rounding rule and saturation of the quantizers, one fully parallel
reservoir update per step, an L-lane readout walking the neurons serially,
the step sequencer and its N + 5 cycle timing, valid/ready streams, the load
port, one readout matrix held at a time, the zero reset state, the hash that
picks the kept elements, the bundle counter width and its saturation, and
streaming an image one pixel per handshake.

Not built: the host processor, DMA engine, bus interconnect and clock/reset
infrastructure of the original system (the top exposes plain streams where
they attach); readout training (done in software); multi-variable inputs. The original hardware was
produced by high-level synthesis without pipelining, and its cycle counts are
not reproduced: this RTL is much faster per step than the reported figures.

## Measured behaviour on the evaluated tasks

Two workload testbenches train readouts in software (least squares on the
states of a bit-exact reference model, Cholesky solve, weights rounded to 16
bits) and then run the accelerator, checking every hardware output against
the model.

**Sequence recall** (`tb_seq_recall`, N = 100, 200, 300; κ = 3; 27 tokens;
2000 training tokens of which the last 1500 are used; one readout per delay).
Fraction of 400 recall steps that return the token seen d steps earlier:

| d | 0 | 2 | 4 | 6 | 8 | 10 | 12 | 15 |
|---|---|---|---|---|---|----|----|----|
| N = 100 | 0.99 | 0.88 | 0.71 | 0.52 | 0.35 | 0.23 | 0.13 | 0.09 |
| N = 200 | 1.00 | 1.00 | 0.96 | 0.85 | 0.65 | 0.47 | 0.33 | 0.14 |
| N = 300 | 1.00 | 1.00 | 1.00 | 0.97 | 0.88 | 0.75 | 0.48 | 0.25 |

These agree with the published intESN memory curves to within a few points.
A 3-bit-per-neuron reservoir of 300 neurons recalls the last five tokens
essentially without error.

**Signal generation** (`tb_generator`, N = 1000, κ = 3, one output, no
input). The readout is trained with teacher forcing for 3000 steps (first
1000 discarded, ridge term 0.01 because a periodic teacher makes the state
covariance singular), then the hardware is teacher-forced for 200 steps and
released. For 0.5·sin(n/4) the mean absolute error over the first 25
free-running steps is about 0.01 and the output keeps the right shape for
100 steps with a slowly growing phase error. For the Mackey-Glass series
(delay 17, sampled once per time unit, squashed with tanh(x − 1)) the error
over the first 50 steps is about 0.05; after roughly 60 steps the prediction
drifts away from the true series. The quantization of the fed-back value, one
of 101 levels, adds error at every step. That error accumulates: the network
is an integer generator.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. Any of them runs with plain Verilator,
for example the end-to-end test at full default size (about one second):

    verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
        rtl/intesn_pkg.sv tb/tb_intesn_top.sv --top-module tb_intesn_top
    ./obj_dir/Vtb_intesn_top

`tb_intesn_top` checks every readout sum, token and level of 533 steps
against a model written from the update equation, measures the step time
with the cycle timer, and counts clipping, quantizer saturation, stalls,
teacher forcing, free-running feedback, quantized inputs, clears, patterns
and bundle saturation (each must occur). Its pattern phase stores 27-pixel
patterns with random values and reads them back at delay 0 with the pixels'
own vectors as readout; stored and read-out values correlate at about 0.7 at
N = 300 (κ = 3 clips the bundle hard). It also reports recall accuracy
with the decoding readout above; at N = 300 and κ = 3 a typical run recalls 100 % at delays 0 and 2
and about 96 % at delay 5.

`tb_seq_recall` (about 30 s, uses `tb/seq_recall_run.sv`) and
`tb_generator` (about 15 s) run the workloads above; add `-y tb` when
building the first.

The unit testbenches (`tb_reservoir`, `tb_readout`, `tb_quantizer`,
`tb_item_memory`, `tb_wta`, `tb_intesn_ctrl`, `tb_cycle_timer`,
`tb_sparse_encoder`, `tb_bundler`) compare each
block with independent reference computations; `tb_reservoir` for example
builds the shift as an explicit permutation-matrix product.
