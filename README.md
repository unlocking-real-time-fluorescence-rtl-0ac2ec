# Pixel-parallel GRU accelerator for real-time fluorescence lifetime imaging

Fluorescence lifetime imaging (FLI) measures how fast fluorescent molecules decay
after a short light pulse. A time-gated camera takes T images at successive delays
after each pulse. Every pixel therefore has a short time series, its *temporal
point spread function* (TPSF). The TPSF is the true decay, the *sample decay
function* (SDF), blurred by the instrument's response. A small recurrent network
(a GRU sequence-to-sequence model) can undo that blur. It maps the TPSF directly
to the SDF, and a trapezoidal integral of the SDF then gives the lifetime τ.

This RTL implements that pipeline for an FPGA. It follows the design in *"Unlocking
Real-Time Fluorescence Lifetime Imaging: Multi-Pixel Parallelism for
FPGA-Accelerated Processing"* (Erbas, Amarnath et al.). That work does not publish
RTL, so the code here is an independent implementation. Its main idea is the same
as the paper's:

> The time steps of one pixel must be computed one after another. Different
> pixels do not depend on each other at all. So many pixels go through the
> network at the same time.

In this implementation, 128 DSP lanes each compute a different pixel. All of them
use the same weight at the same moment, so one weight stream is read from memory
and broadcast to every lane. Each lane serves two pixels in turn. A run therefore
processes 256 pixels. That is the parallel-pixel count the paper reports as its
best configuration for the compressed *Seq2SeqLite* model.

## 1. The network

The default network is Seq2SeqLite. It has one GRU layer of H = 32 units in the
encoder and one in the decoder. The sequences are T = 70 time gates long, and
weights and activations are 8 bits wide. The full *Seq2Seq* model has two layers
of 128 units. It is the same hardware with `H = 128, LAYERS = 2`.

For each pixel the hardware computes:

```
encoder:  h⁰ = 0
          for t = 1..T:  for each layer l (input x_t for l = 0, else h^(l-1)_t):
              z = σ(W_z in + U_z h + b_z)
              r = σ(W_r in + U_r h + b_r)
              h̃ = tanh(W_h in + U_h (r ⊙ h) + b_h)
              h = (1 − z) ⊙ h + z ⊙ h̃
decoder:  starts from the encoder's final h of every layer; layer-0 input is 0
          after each step:  y_t = W_o h^(top) + b_o          (the SDF sample)
lifetime: τ = GATE_DT · Σ_{k=2..T} (y_k + y_{k−1}) / 2  /  max_k y_k
```

### Number formats (this design's choice; the paper only says "8-bit")

| quantity | format |
|---|---|
| TPSF input, hidden state, gate values | 8-bit Q1.7 (1.0 saturates to 127/128) |
| weights and biases | 8-bit Q2.5 (range ±4) |
| accumulator | 24 bits, 12 fraction bits |
| SDF output y | 16 bits, 8 fraction bits, saturating |
| lifetime τ | 32 bits, 8 fraction bits, in the unit of `GATE_DT` |

Products are brought back to Q1.7 by an arithmetic right shift, which truncates.
The sigmoid and tanh outputs are rounded to nearest.

## 2. Lanes and the broadcast weight stream

This is the part that takes the most care to follow.

```
                 ┌────────────────┐  weight word (8 b), one per cycle
   host ───────▶ │ constant_memory│───────────────┬──────────┬── ... ──┐
                 └───────▲────────┘               │          │         │
                         │ cmem_raddr             ▼          ▼         ▼
                 ┌───────┴────────┐  lane_cmd_t ┌──────┐  ┌──────┐   ┌──────┐
                 │ gru_controller │────────────▶│lane 0│  │lane 1│...│lane  │
                 └───────▲────────┘  (broadcast)│      │  │      │   │ 127  │
                         │ pp_done (AND)        └──────┘  └──────┘   └──────┘
```

Each `gru_lane` has its own 24-bit accumulator and its own memory banks:

* a **shared-memory** bank: the hidden states of every layer, for both of its pixels;
* a **data-memory** bank: the z and r⊙h values of the cell being computed;
* a **pixel buffer**: its pixels' TPSF samples (input) and SDF samples (output);
* a **lifetime unit**.

The controller issues one command per cycle. The same command goes to every lane.
The command carries the operation and the addresses in the lane's banks that hold
its operand. In the same cycle the controller reads one weight from constant
memory. One cycle later every lane receives that weight, its own operand from its
own banks, and the command, registered. It then executes the command. All lanes
therefore work on the same row of the same equation at once, each for a
different pixel.

One matrix row is computed as a burst of commands:

| command | lane action |
|---|---|
| `BIAS` | acc ← b (shifted to the accumulator format) |
| `MAC` × IN | acc += W·input (the TPSF sample, or the layer below's h) |
| `MAC` × H | acc += U·h  (gates z, r)  or  U·(r⊙h)  (candidate) |
| `FIN_Z` | z_j ← σ(acc), written to data memory |
| `FIN_R` | (r⊙h)_j ← σ(acc)·h_j, written to data memory |
| `FIN_C` | h_j ← ((1−z_j)·h_j + z_j·tanh(acc)), written in place in shared memory |
| `FIN_Y` | y ← acc, written to the pixel buffer and the lifetime unit |
| `CLR` | h word ← 0 (the encoder's zero initial state) |

The z rows are computed first, then the r rows, then the candidate rows.
The candidate for row j needs r⊙h for *all* k, and those values are already
cached in data memory. So h_j can be overwritten as soon as its own candidate is
known, and no second copy of h is needed. For the same reason the hand-off
between encoder and decoder costs nothing. The decoder continues on the hidden
state words the encoder left behind. This corresponds to the "hidden state
vector" links between encoder and decoder in the paper's model figure.

Pixel `p` lives in lane `p % LANES`, group `p / LANES`.

## 3. The schedule

`gru_controller` runs a fixed loop nest. The loop over pixel groups sits just
inside the loop over time:

```
CLEAR   LAYERS·GROUPS·H cycles
for phase in (encoder, decoder):
  for t in 0..T-1:
    for group in 0..GROUPS-1:
      for layer:  for gate in (z, r, h̃):  for row j:  BIAS, IN×MAC, H×MAC, FIN
      (decoder only) dense row: BIAS, H×MAC, FIN_Y
DRAIN 2 cycles, then post-processing (lifetime normalisation)
```

A row costs `2 + IN + H` cycles. IN is 1 for encoder layer 0, which has one
scalar input. IN is 0 for decoder layer 0: its input is zero, so the W column is
skipped. For deeper layers IN is H. The pipeline has no bubbles, so the run time
is exact:

```
cycles = LAYERS·GROUPS·H
       + T·GROUPS·( Σ_l 3H(2+IN_enc(l)+H) + Σ_l 3H(2+IN_dec(l)+H) + 2 + H )
       + ~GROUPS·50  (lifetime division)
```

For the defaults this is 64 + 932,120 cycles to the end of the decoder, and about
932,290 cycles to `done`. It processes 256 pixels. The clock frequency is not
specified; at 200 MHz one run takes 4.7 ms.

The paper obtains its schedule differently. It feeds task graphs of the encoder,
decoder and post-processing to an off-line discrete-event scheduler (STOMP).
That scheduler maps each ready operation to the next free DSP or BRAM, first
come first served. That schedule is not published. The fixed SIMD-style schedule
here is this design's own. It keeps the paper's two key properties: pixels run in
parallel, and the memory is split into constant, shared and data regions.

## 4. Memories

| block | holds | organisation here | paper's evaluation set-up |
|---|---|---|---|
| `constant_memory` | W, U, b of every gate, W_o, b_o | one array, one broadcast read port, host write port; 6,561 words for the default model, 297,345 for H=128/2 layers | 128 BRAMs |
| `shared_memory` | hidden states | one bank per lane, `H·LAYERS·GROUPS` words | 128 BRAMs |
| `data_memory` | z and r⊙h of the current cell | two banks per lane, H words each | 256 BRAMs |
| `pixel_buffer` | TPSF in, SDF out | per lane, `T·GROUPS` words each | not described |

All memories have a synchronous read (data one cycle after the address). When a
word is read and written in the same cycle, the read returns the old value.

Constant-memory layout: the encoder cells come first (layer 0 upward), then the
decoder cells, then the dense row `[b_o, W_o(0..H-1)]`. Inside a cell the gate
blocks are z, r, h̃. Each gate block has H rows `[b_j, W_j(0..IN-1), U_j(0..H-1)]`,
where IN = 1 for layer 0 and H otherwise. The decoder's layer-0 W column is stored
but never read. `fli_pkg::cmem_depth(H, LAYERS)` gives the size. For H = 128 with
two layers the formula gives 297,345 parameters, which matches the paper's
"299k-parameter" model. For H = 32 with one layer it gives 6,561 bytes, close to
the paper's 6.73 KB.

## 5. Activations

`act_unit` evaluates the sigmoid with the PLAN piecewise-linear approximation.
It uses slopes 1/4, 1/8 and 1/32 and is flat beyond |x| = 5, so only shifts and
adds are needed. It computes tanh as 2σ(2x) − 1. The paper lists sigmoid and tanh
among the DSP operations but does not say how they are evaluated. The PLAN
approximation is this design's choice. A network trained with the exact functions
will lose some accuracy unless it is fine-tuned with these.

## 6. Lifetime post-processing

`lifetime_unit` builds the trapezoid sum while the decoder runs. For each pixel
group it keeps three values: the running Σ(y_k + y_{k−1}), the running maximum,
and the previous sample. After the decoder finishes, one sequential restoring
divider per lane (48 cycles per pixel) computes

```
τ = (GATE_DT · Σ(y_k + y_{k−1}) · 256) / (2 · max y)
```

Pixels with max y ≤ 0 or a negative sum get τ = 0. Such pixels still go through
the divider and the result is discarded. That keeps the latency fixed at 51 cycles
per group whatever the data, so all lanes finish in the same cycle and the
controller can simply AND their `done` pulses. An assertion in the top checks this.
The paper defines S_max as
"the maximum or initial signal"; the maximum is used here. The gate spacing is the
parameter `GATE_DT`, default 40, and τ comes out in the same time unit. The paper
says in one place that images are taken "every 40 ns", while its frame labels read
0.04 ns, 0.84 ns, and so on. So set `GATE_DT` and interpret its unit to match your
camera. The paper mentions a second lifetime τ₂ for bi-exponential decays. It is
not produced here, because the network has a single SDF output.

## 7. Interface (`fli_accel`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `cmem_we/waddr/wdata` | in | 1/20/8 | load one weight word per cycle (only while idle) |
| `px_we/px_pixel/px_gate/px_data` | in | 1/8/7/8 | load TPSF sample (Q1.7) of a pixel (only while idle) |
| `start` | in | 1 | pulse: run all pixels |
| `busy`, `done` | out | 1 | high during the run; one-cycle pulse at the end |
| `rd_pixel`, `rd_gate` | in | 8/7 | select an output |
| `rd_sdf`, `rd_tau` | out | 16/32 | SDF sample and lifetime, one cycle after the address |
| `phase`, `cur_group` | out | 2/8 | schedule position (0 idle/clear, 1 encoder, 2 decoder, 3 post) |

Parameters are `LANES` (128), `GROUPS` (2), `H` (32), `LAYERS` (1), `T` (70) and
`GATE_DT` (40). An assertion flags host writes during a run. The weights persist
across runs. The hidden state is cleared at every start.

## 8. Configurations evaluated in the paper

| workload | needed | this RTL at default parameters | fits |
|---|---|---|---|
| Seq2SeqLite, 256 parallel pixels | H=32, 1 layer, T=70, 256 pixels, 6.6 k weights | 128 lanes × 2 groups = 256 pixels, 6,561-word weight memory | yes |
| Seq2Seq, 64 parallel pixels | H=128, 2 layers, 297 k weights | 6,561-word weight memory, H=32 | no, but yes with `H=128, LAYERS=2, LANES=64, GROUPS=1` |
| post-processing, 512 parallel pixels | lifetimes of 512 pixels at once | 256 lifetime computations per run | no (two runs) |
| 512×512 camera frame | 262,144 pixels | 1,024 runs of about 932 k cycles (about 4.8 s at 200 MHz) | runs, but not within the paper's 500 ms |

The paper's speed-ups and execution times come from a scheduling simulator with
its own cost model. They are not cycle counts of this RTL and cannot be compared
with them directly.

## 9. Where this departs from the paper

* **Schedule.** Fixed lock-step lanes replace the paper's scheduler-generated,
  first-come-first-served mapping of operations onto DSPs and BRAMs.
* **Memory banking.** The bank counts follow the evaluation set-up (one
  shared-memory bank and two data-memory banks per lane). Constant memory is a
  single broadcast array rather than 128 BRAMs.
* **Arithmetic.** The fixed-point formats, truncation, PLAN activations and the
  divider are all this design's choices.
* **Operation counts.** The paper lists per-pixel operation counts for each
  model. The activation counts match this schedule when one gate vector counts as
  one operation: 4·LAYERS·T sigmoids and 2·LAYERS·T tanh, which gives 280/140 for
  the small model and 560/280 for the large one. The end-to-end testbenches check
  these counts. The add, multiply and divide counts (for example 16,310 multiplies
  for the small model) do not match element-wise counting and were not reconciled.
  Here one pixel's encoder step alone takes 96 rows × 33 multiplies.
* **Post-processing parallelism.** Post-processing runs over the pixels of one
  run (256), not 512.
* **Not built.** The camera and board interfaces and the off-line scheduler are
  not built. The training flow (knowledge distillation, quantisation-aware
  training) is not built either. Only one lifetime is computed.

## 10. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. The reference model `tb/fli_ref_pkg.sv` is a
bit-exact integer model of the arithmetic above, written independently of the RTL
structure. It also generates the expected command stream of Algorithm 1.

| testbench | what it checks |
|---|---|
| `tb_act_unit` | sigmoid and tanh over ±8 in steps of 3, random full-range inputs, breakpoints |
| `tb_constant_memory`, `tb_shared_memory`, `tb_data_memory` | write/read-back, read latency, read-during-write, bank independence |
| `tb_lifetime_unit` | τ of three interleaved groups (exponential, noisy, all-negative); latency identical for every data pattern |
| `tb_gru_controller` | the whole command and weight-address stream, cycle by cycle, for a 2-layer network; drain, post-processing and done handshake |
| `tb_gru_lane` | one lane running a 2-layer network from a testbench-generated command stream; SDF and τ against the reference |
| `tb_fli_accel` | end to end: a 1-layer and a 2-layer network, two runs each, every SDF sample and τ, the schedule length, and coverage counters (state clear, encoder steps, encoder-to-decoder hand-off, decoder outputs, group switches, post-processing, saturated and linear activations) |
| `tb_fli_accel_full` | the top at its default parameters: 256 pixels × 70 gates, 18,184 checks including 280 sigmoid and 140 tanh vectors per pixel, about 932 k cycles (about 11 s in Verilator) |
| `tb_fli_accel_seq2seq` | the full Seq2Seq network (H = 128, two layers, 70 gates) on 8 lanes: every SDF sample and τ against the reference, about 21 M cycles (about 27 s) |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fli_pkg.sv tb/fli_ref_pkg.sv rtl/*.sv tb/fli_e2e_run.sv tb/tb_fli_accel.sv \
    --top-module tb_fli_accel -o sim
./obj_dir/sim
```

For another testbench, swap in its file and top module. `fli_e2e_run.sv` is needed
only by the three `tb_fli_accel*` testbenches. The simulator has no X values; every state element the
design reads is reset or written before use.

## 11. Files

`rtl/fli_pkg.sv` holds the formats, the command type and the layout helpers.
`rtl/fli_accel.sv` is the top. `rtl/gru_controller.sv` is the schedule, and
`rtl/gru_lane.sv` is the lane datapath. The remaining files are memories, the
activation unit, the lifetime unit and the divider. Each file starts with a
comment describing its function, timing, and which parts follow the paper.
