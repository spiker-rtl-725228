# Spiker in SystemVerilog: a clock-driven LIF spiking-network accelerator

Spiker classifies small images with a spiking neural network (SNN) and is
built for a mid-range FPGA. The network is the classic one-layer MNIST
network of Diehl and Cook. The 784 pixels are turned into random spike
trains. A layer of 400 leaky integrate-and-fire (LIF) neurons integrates
those spikes. The neurons inhibit one another, and each neuron's spikes
are counted over 3500 time steps. The neuron that spikes most gives the
class.

The design is fast because it does as little as possible per neuron:

* **No multiplier in the neuron.** All voltages are offset so that the
  resting potential is 0. The leak then no longer needs a subtraction of
  V_rest. The leak factor dt/tau is also rounded to 2^-10, so the leak is
  `V - (V >>> 10)`. A neuron is one saturating adder, a shift, a
  comparator and two 16-bit registers.
* **One random number for all inputs.** All pixels compare their
  intensity against the same LFSR output in each step, so the input
  interface needs one LFSR and 784 comparators.
* **Serial spikes, parallel neurons.** Each neuron takes one input spike
  per clock. The layer control unit walks through the input spikes of a
  step one index per cycle. All 400 neurons receive that index at once,
  and each gets its own weight from one wide BRAM row.
* **Empty steps are skipped.** An OR over each spike vector decides
  whether its phase runs at all. For MNIST fewer than 1% of the 3500 steps
  carry any input spike. A silent step costs one clock cycle here
  instead of 1186.

This RTL implements that design in the configuration used for MNIST. The
network-level description of the design does not include its block
diagram. The block boundaries, handshakes and cycle timing are therefore
this implementation's own, built to match the behaviour and the numbers
the design gives. The section "Where this RTL goes beyond the source
description" lists every such choice.

## Numbers at a glance

| Quantity | Value | Where it lives |
|---|---|---|
| Inputs | 784 (28 x 28), 8-bit intensities | `spiker_pkg::N_INPUTS`, `PIXEL_W` |
| Neurons | 400, one layer, all-to-all lateral inhibition | `N_NEURONS` |
| Steps per image | 3500 (350 ms in 0.1 ms steps) | `N_STEPS` |
| Membrane potential | signed 16 bit, Q13.3 | `V_W`, `V_FRAC` |
| Excitatory weight | signed 5 bit, Q2.3 | `W_W`, `W_FRAC` |
| Leak | dt/tau = 2^-10, arithmetic shift by 10 | `DECAY_SHIFT` |
| V_rest / V_reset / V_th0 | 0 / 5.0 / 13.0 (originally -65 / -60 / -52 mV) | codes 0 / 40 / 104 |
| Inhibitory weight | -15 for every lateral link | code -120 |
| Weight store | 784 x 400 x 5 bit = 1,568,000 bit (196 KB) | `weight_memory` |
| Random value | 15-bit maximal LFSR (own choice) | `LFSR_W` |
| Output counters | 400 x 12 bit | `CNT_W` |

A Q13.3 code is the millivolt value times 8. A Q2.3 weight sign-extends
straight onto it, because both formats put the binary point in the same
place.

## How one image is processed

### The step

`central_cu` runs an image as 3500 steps. A step has three parts.

1. **Generate.** `spike_generator` compares the shared random value `r`
   with every intensity and registers the spike vector.
2. **Elaborate.** The central unit raises `layer_start` once the layer is
   `ready`. On that edge the layer control unit (`layer_cu`) samples two
   vectors:
   * the excitatory vector (the 784 input spikes);
   * the inhibitory vector (the layer's own 400 output spikes from the
     previous step).
3. **Fire.** After the spikes have been applied, every neuron either fires
   or leaks.

The central unit overlaps the generation of step k+1 with the start of
step k. On the edge where the layer samples the spike register, that
register is loaded with the next vector. Generation therefore costs a
cycle only once per image. After the last step the central unit pulses
`rst_v`, the "RESET V" signal, and every membrane returns to 0, so the
next image starts from the same state. The output counters are cleared
when an image starts.

### Inside the layer: three phases

A step with spikes, here with both phases running:

```
cycle:      0        1      2     ...  784     785    ...  1184    1185    1186
layer_cu:  start    EXC    EXC   ...  EXC     INH    ...  INH     FIRE    ready/start
           sample   idx=0  idx=1 ...  idx=783 idx=0  ...  idx=399
BRAM:               read 0 read 1 ... read 783
neurons:                   +w[0] ...  +w[782] +w[783] ... -15?    -15?    fire/leak
```

The BRAM has a read latency of one cycle. `layer_cu` therefore issues the
address in one cycle and hands the neurons the command (`cmd`,
`cmd_spike`, `cmd_idx`) one register later, together with the weight row.
The neuron commands are:

| `cmd` | Neuron action |
|---|---|
| `CMD_EXC` | if `spike_in`: `V <= sat(V + weight)` |
| `CMD_INH` | if `spike_in`: `V <= sat(V - 15.0)`; the layer masks a neuron's own spike |
| `CMD_FIRE` | if `V > threshold`: `V <= V_reset`, `spike_out <= 1`; else `V <= V - (V >>> 10)`, `spike_out <= 0` |
| `CMD_NONE` | hold |

An OR over each sampled vector decides whether its phase runs at all.
When a phase runs, it visits every index, one per cycle. Indices without a
spike still cost their cycle. A step with spikes therefore takes

    2 + 784 * (any input spike) + 400 * (any neuron fired last step)   cycles.

A step with no spikes at all takes one cycle. In the cycle of `start` the
control unit sees that both ORs are zero, issues `CMD_FIRE` straight away
and stays ready. The next step can be started on the following edge, so
a run of silent steps proceeds at one step per clock. One image takes,
from the cycle in which `start` is high to the cycle in which `done` is
high,

    7 + sum over the 3500 steps of the step cost.

With no spikes at all that is 3507 cycles. MNIST digits carry excitatory
spikes in about 23 of the 3500 steps on average. Without inhibitory
phases that gives 7 + 3500 + 23 * 785 = 21,562 cycles, or 215.6 us at
100 MHz. This agrees with the published figure of about 215 us per image.
Each step that also carries inhibitory spikes adds 400 cycles.

### Forwarding the fire decision

Back-to-back steps create one hazard. When step k ends, its `CMD_FIRE`
leaves the alignment register one cycle after it was issued. At that
point the layer may already be starting step k+1 and sampling its
inhibitory vector. That vector must hold the spikes decided by step k's
`CMD_FIRE`, and the neurons' `spike_out` registers do not show them yet.
Each neuron therefore also has a combinational `spike_now` output. While
`CMD_FIRE` executes, it carries the decision being made (`V > threshold`).
At all other times it equals `spike_out`. The layer feeds `spike_now`, not
`spike_out`, to the control unit.

`ready` only means that the control unit can take a new `start`. A
separate `quiet` output also requires that no command is still in
flight. The central unit waits for `quiet` before it pulses RESET V at
the end of an image, so the last fire decision is not overwritten.

### The inhibition loop

The inhibitory inputs of a layer are its own outputs from the previous
step. A spike from neuron k lowers the potential of every other neuron
by 15.0 in the next step. Neuron k is not affected by its own spike. In
the first steps after an image has switched many neurons towards the
threshold, this is what makes them compete. When the whole layer fires
together, the 399 inhibitory spikes sum to -5985. Every addition
saturates at the 16-bit limits, which is also the reason this design adds
saturation at all.

## Input encoding

Each intensity p is treated as a spike probability per step. Input i
spikes in a step when `r < p[i]`, where `r` is the LFSR value of that
step, so the probability is p[i] / 2^15 for the 15-bit LFSR. A full-white
pixel (255) spikes in 0.8% of steps. That is close to the reference
network's rate coding (intensity/4 Hz at 0.1 ms steps, or 0.64% for 255).
It also gives an expected 27 active steps per image, near the 23 measured
on MNIST.

Because every input sees the same `r`, the inputs are not independent.
In a given step the spiking inputs are always exactly those brighter than
`r`. Using one generator for all inputs costs about 2 points of MNIST
accuracy (77.2% to 75.0%) and saves almost the whole input interface. The
LFSR's consecutive states are shifted copies of each other, so small
values of `r` come in runs. Seeded with 1, the first states are the powers
of two, and a 15-bit LFSR would give 98 steps with `r < 255` among its first
3500, against 27 on average over its full period. The top's default seed
is therefore 0x5A5A, which gives 21 such steps in the first image. Set the
`SEED` parameter if another sequence is wanted.

## Weight storage and address translation

Row i of `weight_memory` holds the 400 weights from input i, neuron j in
bits `[5j+4:5j]`. This is 2000 bits per row, read in one cycle.
Physically the 784 rows are split into a 512-row bank and a 272-row bank.
`weight_addr_translator` maps the spike index onto a bank and a row:
`bank = i / 512` and `row = i % 512`. With a power-of-two bank depth this
mapping is only wiring plus a range check. Other depths need a real
divider. A depth of 512 matches 36 Kb block RAMs used as 512 x 72. Inferred
that way the store needs about 56 BRAM36. The original implementation
packs it into 45 BRAMs with a layout it does not describe.

Only excitatory weights are stored. The lateral inhibitory weight is one
constant for every link.

## Files and hierarchy

```
spiker_top
├── central_cu               step sequencing, RESET V, start/busy/done
├── spike_generator          intensity registers + comparators
│   └── lfsr                 one maximal-length LFSR
├── layer
│   ├── layer_cu             phase FSM, spike serialisation, OR skip
│   └── neuron  x N_N        LIF datapath, per-neuron threshold
├── weight_memory
│   ├── weight_addr_translator  (write and read side)
│   └── weight_bank  x 2     synchronous RAM
└── output_counters          N_N saturating counters
spiker_pkg                   formats, constants, neuron_cmd_e, LFSR taps
```

Every file in `rtl/` holds one module or package under its own name.
Each file opens with a comment on its function, interface, timing and
choices.

## Using `spiker_top`

1. Hold `rst_n` low for a cycle. The reset is synchronous and active low.
   Thresholds reset to 13.0, membranes to 0 and intensities to 0.
2. Load the weights: for each input index i, put the 2000-bit row on
   `w_data`, set `w_addr = i` and pulse `w_we`.
3. Optionally load per-neuron thresholds through `thr_we`, `thr_addr` and
   `thr_data` (Q13.3 codes).
4. Load the 784 intensities through `pix_we`, `pix_addr` and `pix_data`.
5. Pulse `start`. `busy` stays high for the run. When `done` pulses,
   `counts[j]` holds neuron j's spike count for the image.
   `out_spikes` and `out_valid` show each step's spikes as they are
   produced. `exc_phase_run`, `inh_phase_run` and `step_skipped` pulse
   once per step for monitoring.

Weights and thresholds persist across images. For the next image, repeat
steps 4 and 5.

## Where this RTL goes beyond the source description

Following the design description:

* The block set: input interface with a single LFSR, central control
  unit, layer control unit, neurons, BRAM weights with address
  translation, and output counters.
* All sizes, formats and model constants.
* The shift-based leak and the V_rest = 0 offset.
* Fire-and-reset, the synchronous RESET V and per-neuron thresholds.
* Spikes are serialised with excitatory before inhibitory, and empty
  steps are skipped by an OR.

This implementation's own choices:

* **Spike polarity.** The description says a spike occurs when the
  random number is *greater* than the spike probability. That would make
  dark pixels fire most. This RTL spikes when `r < intensity`, as the
  definition of the probability requires.
* **Leak once per step.** The description says the potential is updated
  on every clock cycle. A step here spans several cycles, and the leak is
  applied once per step, in the FIRE command, which is what dt/tau = 2^-10
  means.
* **Order within a step.** The order is excitatory, then inhibitory, then
  fire-or-leak. A neuron that fires is reset and does not also leak in
  that step. The fire test is strict (`V > threshold`).
* **Saturating arithmetic** in the neuron, and **saturating counters**.
* **Widths and encodings** that the description leaves open: a 15-bit
  LFSR with standard maximal taps and seed 0x5A5A, the `r < p` comparison
  without further scaling, 12-bit counters, the command encoding, and
  signed Q2.3 weights.
* **Step cycle counts.** Every index of a running phase costs a cycle,
  a silent step costs one cycle, and a step with spikes 2 more. The
  cycle breakdown is not published; this one reproduces the published
  time per image.
* **Overlap, forwarding and ports.** Spike generation overlaps the layer
  start, and a step may start while the previous fire decision executes,
  with `spike_now` forwarding that decision. The start/ready/quiet and
  start/busy/done handshakes and all loading ports are this design's
  own.
* **Memory layout.** The weight memory uses 2000-bit rows in 512-row
  banks, not the 45-BRAM packing of the original.
* **One layer only.** The central unit accepts several layers
  (`N_LAYERS`), but `spiker_top` builds the evaluated single-layer
  network. Deeper feed-forward chains are not wired.

Training (offline STDP) and the choice of class from the counts happen
outside the accelerator.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb/spiker_ref_pkg.sv` is an integer model of the layer and the LFSR,
written from the equations above rather than from the RTL. The layer and
system testbenches compare against it.

| Testbench | What it establishes |
|---|---|
| `tb_spiker_pkg` | every LFSR tap entry from 3 to 16 bits has period 2^w - 1; Q13.3 codes of the model constants; `clog2_min1` |
| `tb_lfsr` | bit-exact against an explicit tap model; periods 255 and 32767; never zero |
| `tb_spike_generator` | `r < p` per step; over one LFSR period, input i spikes exactly p-1 times |
| `tb_neuron` | 12,000 random commands against an integer model; saturation; leak of 15000 and -32768; `spike_now` |
| `tb_layer_cu` | command order, BRAM address alignment, phase skipping, cycles per step, back-to-back and paused steps, `quiet` |
| `tb_layer` | 8x4 layer against the model, step by step, with per-neuron thresholds and RESET V |
| `tb_weight_addr_translator` | exhaustive, for 784/512 and for 20/6 |
| `tb_weight_memory` | random row writes and reads across banks, read latency, hold |
| `tb_output_counters` | random increments, saturation, clear |
| `tb_central_cu` | step count, generation overlap, RESET V one cycle after every layer is quiet, start only when ready |
| `tb_spiker_top` | 16 inputs, 5 neurons, 80 steps, 4 images: per-step spikes, counts and exact latency; checks that every mechanism occurs |
| `tb_spiker_full` | default size (784 x 400 x 3500 steps): one synthetic ring-shaped image; per-step spikes, counts and latency against the model |

`tb_spiker_top` counts each mechanism and fails if one never happens:
skipped steps, silent steps back to back, excitatory and inhibitory
phases, fires, a fire decision forwarded into the next step's sampling,
reads from the second weight bank, threshold loads and RESET V.

The full-size run takes 18,822 cycles (188 us at 100 MHz) for its test
image, with 19 excitatory phases and one inhibitory phase. It finishes in
a few seconds of simulation. The MNIST data set is not
included, so accuracy is not measured here.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/spiker_pkg.sv tb/spiker_ref_pkg.sv tb/tb_spiker_top.sv --top-module tb_spiker_top
./obj_dir/Vtb_spiker_top
```

Replace the last file and the top-module name for any other testbench.
The packages must come first. `-y` lets Verilator find every module by
its file name.

## Changing the design

* **Network size.** `spiker_top` takes `N_IN`, `N_N` and `STEPS`. The
  weight row width (`N_N*5`), the address widths and the BRAM split all
  follow. Keep `CNT_W` large enough for `STEPS`.
* **Model constants** (`V_RESET`, `V_TH0`, `W_INH`, `DECAY_SHIFT`) live
  in `spiker_pkg`. Thresholds can also be changed at run time.
* **Random source.** `RAND_W` and `SEED` on the top. Widths 3-16, 24 and
  32 have taps in `spiker_pkg::lfsr_taps`, and `RAND_W` must be at least
  the pixel width.
* **BRAM geometry.** `BANK_DEPTH` sets the rows per bank.
