# An event-driven spiking neural network with on-line STDP learning

This is synthesizable SystemVerilog for a small spiking neural network (SNN)
that learns without supervision. It follows the architecture in "FPGA
Implementation of Simplified Spiking Neural Network" (Gupta, Vyas, Trivedi).
A 28 x 28 grey-level image is turned into spike trains, one per pixel. The
trains drive 784 input neurons, which are fully connected to 16 output
neurons: 784 x 16 = 12,544 synapses. Each output neuron is a simplified leaky
integrate-and-fire neuron. Synapse weights learn on-chip through
spike-timing-dependent plasticity (STDP). After an image, the output neuron
that fired most often names the class.

Time advances in discrete *time units*, 200 per image. The main idea is that
a time unit takes only as many clock cycles as its activity needs:

| time unit                                   | processes                               | cycles      |
|---------------------------------------------|-----------------------------------------|-------------|
| no input spike                              | decay, spike count                      | 2           |
| input spikes, no output spike (or not training) | decay, adder pass, spike count      | N_IN + 4    |
| input and output spikes, training           | decay, adder pass, weight change, spike count | 2 N_IN + 5 |

At N_IN = 784 and 100 MHz, that is 20 ns, 7.9 us and 15.7 us. The paper
reports maxima of 8.5 us (classification) and 17 us (training).

## Numbers and formats

| quantity | value | origin |
|---|---|---|
| input neurons `N_IN` | 784 (28 x 28) | paper |
| output neurons `N_OUT` | 16 | paper |
| potential and weight width `W` | 24 bits | paper |
| number format | two's complement Q11.12 (1.0 = 4096) | this design; the paper says "floating point" but gives no format |
| time units per image `T_UNITS` | 200 | derived from the paper's timing table (0.5 ms per image / 2.5 us per average time unit) |
| STDP window | 2 to 20 time units, both directions, 19 table entries per side | paper |
| leak `D` | 0.25 per time unit | this design |
| rest `R_P`, refractory potential `P_REFRACT` | 0 | this design |
| floor `P_MIN` | -4.0 | this design |
| refractory time | 15 time units | this design |
| weight bounds `W_MIN`, `W_MAX` | -1.2, 2.0 | this design |
| STDP sigma, A+, A-, tau+, tau- | 0.1, 0.8, 0.3, 8, 5 | this design |
| minimum spike period `RP_MIN`, full-scale `R_MAX` | 5 time units, 255 | this design |

All neuron constants are in `rtl/snn_pkg.sv`. The STDP shape is set by
parameters of `exp_lut`.

## From pixels to spike trains (preprocessor)

`receptive_field` holds the image and blurs it with a 3 x 3 binomial kernel
(`[1 2 1; 2 4 2; 1 2 1] / 16`, zero padding). The paper only says "low-pass
blurring filter"; the kernel is this design's choice.

`spike_freq_gen` turns each blurred value RF into a spike period:
`period = RP_MIN * R_MAX / RF` time units. RF = 0 gives no spikes. The
brightest pixel therefore fires every `RP_MIN` time units, and the firing rate
is proportional to RF. The paper's printed formula has RF and R_MAX the other
way up. That would give faint pixels the highest rates, which contradicts its
own text, so this design follows the text.

`input_spike_gen` gives every input a period register and a countdown. After
a restart, an input with period P spikes in time units P-1, 2P-1, and so on.
The spike trains are strictly periodic. That has a useful result: the time
until an input's *next* spike is simply its countdown value. STDP depression
needs exactly this number (see below).

The controller fills the 784 periods in 784 cycles, one pixel per cycle.

## The variable threshold

The paper sets the firing threshold per image to "one third the maximum input
spike frequency of the layer". This design reads that as:

```
vth = (max over time units of the number of inputs spiking in it) * 1.0 / 3
```

This needs the whole image's activity before the first time unit. The
controller therefore runs a *pre-pass* first. It restarts the spike
generators and ticks them once per cycle for 200 cycles, while
`threshold_unit` takes a population count of each spike vector. Then it
restarts the generators, and the real run sees identical trains. The
pre-pass costs 200 cycles per image.

## A time unit, cycle by cycle

`controller` sequences each time unit (phase names as in `snn_pkg::phase_e`):

1. **DECAY** (1 cycle). The spike generators tick. The input neurons
   (`input_neuron_block`) latch the new spike vector and update each input's
   *age*, the time units since its last spike. Every output neuron then
   updates its potential P:
   - A refractory neuron counts down and holds `P_REFRACT`.
   - Otherwise, if P <= `P_MIN`, P returns to rest.
   - Otherwise, if P > rest, P leaks by D, clamped at rest.

   If no input spiked, the next state is SC.
2. **ADD** (784 cycles, then ADD_END). The controller walks `idx` over all
   inputs. All 16 output neurons work in lock step. Each neuron pops weight
   `idx` from its weight FIFO, and the weight arrives one cycle later. In that
   cycle the core supplies input `idx`'s registered spike bit. The neuron adds
   the weight if the input spiked and the neuron is not refractory, then
   pushes the weight back unchanged.
3. **FIRE** (1 cycle). Each neuron reports whether P >= vth.
   `lateral_inhibition` decides who fires:
   - At the first output spike of an image, only the winner fires: the
     highest potential, or the lowest index on a tie. Every other neuron loses
     vth/2.
   - After that, every neuron that crosses the threshold fires.

   A neuron that fires drops to `P_REFRACT` and ignores input for 15 time
   units.
4. **WC** (784 cycles, then WC_END). This step runs only when training and
   some neuron fired. It is a second pass through the FIFOs. For each input,
   `exp_lut` looks up two factors that all neurons share:
   - `dw_pot`, from the input's age (pre-synaptic spike before the output
     spike);
   - `dw_dep`, from its time to the next spike (pre-synaptic spike after the
     output spike).

   Each neuron that fired in this time unit applies `weight_change_unit`
   before pushing the weight back:
   ```
   w1 = w  + dw_pot * (W_MAX - w)      dw_pot =  sigma*A+ * exp(-age/tau+)     if 2 <= age  <= 20
   w2 = w1 + dw_dep * (w1 - W_MIN)     dw_dep = -sigma*A- * exp(-next/tau-)    if 2 <= next <= 20
   ```
   Both factors are below 1 in magnitude, so weights stay within their bounds
   without clamping. The tables are computed at elaboration with `$exp`, in
   Q16.
5. **SC** (1 cycle). Each neuron's spike counter adds this time unit's spike.

The weight memory is a FIFO because of how the passes work. Every pass reads
all 784 weights in input order and writes each one back, so a circular FIFO
with one read port and one write port is enough. It is one block RAM per
neuron (784 x 24 bits fits in 36 Kb), as the paper describes. Host access
uses the same mechanism.

After 200 time units, `max_spike_detect` picks the neuron with the most
spikes. `class_decoder` maps it to a class through a 16-entry label table
written by the host. Which neuron learned which digit is only known after
training, so the table is loaded afterwards.

## Using the top level (`snn_top`)

1. Reset with `rst_n` low, held for at least one cycle.
2. Fill the weights. For each neuron `j`, push its 784 initial weights in
   input order: `w_we = 1`, `w_sel = j`, one `w_wdata` per cycle.
3. Write the labels: `lbl_we`, `lbl_idx`, `lbl_data`.
4. Write an image: `pix_we`, `pix_addr` (raster order, 0..783), `pix_data`.
5. Pulse `start` with `train` = 1 (learn) or 0 (classify). `busy` stays high
   until `done` pulses.
6. Read the result: `out_class`, `out_valid` (some neuron fired), `winner` and
   `spike_count[16]`. These hold until the next image.
7. To read weights while idle: each `w_rd` cycle rotates neuron `w_sel`'s FIFO
   by one word and shows that word on `w_rdata` (with `w_rvalid`) one cycle
   later. 784 reads return all weights in order and leave the FIFO unchanged.

Pixel, weight and label writes are ignored while `busy`. The outputs `phase`,
`fire`, `li_event` and `threshold` are for observation only.

## Module map

| module | role |
|---|---|
| `snn_pkg` | widths, neuron constants, controller phases |
| `snn_top` | controller + preprocessor + core + classifier |
| `controller` | image sequence, threshold pre-pass, time units |
| `preprocessor` | `receptive_field` -> `spike_freq_gen` -> `input_spike_gen`, plus `threshold_unit` |
| `snn_core` | `input_neuron_block`, `exp_lut`, `lateral_inhibition`, 16 x `output_neuron` |
| `output_neuron` | `weights_memory` (FIFO), `potential_adder`, `weight_change_unit`, spike counter |
| `max_spike_detect`, `class_decoder` | output classifier |

Each file opens with a description of its interface and timing.

## Where this design departs from, or fills in, the paper

- **Number format.** The paper mentions floating-point weights but gives no
  format. Here all potentials and weights are 24-bit fixed point.
- **Equations.** The paper's potential update and STDP curve are printed with
  broken conditions: "P_min > P < P_th", and "0 if 2 < dt < 2". This design
  reads them as P_min < P < P_th, and as zero change for |dt| < 2, with the
  usual decaying exponentials for the rest.
- **When a neuron fires.** The threshold is tested after the adder pass of
  the same time unit. This follows the paper's time-unit breakdown, not the
  equation's P(t-1) indexing.
- **Spike counter step.** It runs in every time unit. The paper's figure
  shows it only in time units without input. In its breakdown figure, the
  bar patterns of decay and adder do not match the legend; the printed labels
  (tpd first, then tpa) were followed.
- **STDP pairing.** Only the nearest pre-synaptic spike on each side of the
  output spike counts.
- **Threshold.** The threshold pre-pass, the popcount reading of "input spike
  frequency" and the threshold scale of 1.0 per spike are this design's.
- **Unspecified parts.** The blur kernel, all neuron constants, the tie rules
  and the label-table class decoder are choices made here. The paper names
  these parts but does not specify them.
- **Hidden layer.** The paper's general network drawing shows a hidden
  layer. The network it builds and measures has none, and neither does this
  one.
- **Speed.** Per image, this design needs 984 setup cycles plus its time
  units: at most 1.59 ms to classify and 3.16 ms to train at 100 MHz. On the
  synthetic test images it took about 0.95 ms and 1.35 ms. The paper reports
  0.5 ms and 1.1 ms on MNIST. Average activity, and so average speed, depends
  on the images.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
ends by printing `TB_RESULT checks=N failures=M`.

`tb/snn_ref_pkg.sv` is an independent behavioural model of the whole
algorithm. `tb_snn_core` (64 x 4) and `tb_snn_top` (full size) compare
against it. `tb_snn_top` runs at the default parameters:

- It loads random weights and trains on three synthetic stroke images, then
  classifies two.
- For every time unit it compares the output spike vector with the model.
- For every image it compares the threshold, spike counts, winner and class.
- After training it compares all 12,544 weights.
- It checks the cycle length of every time unit against the table above, and
  against the paper's 8.5 us and 17 us maxima.
- It requires every mechanism to occur at least once: quiet time units,
  adder and weight-change passes, lateral inhibition, refractory blocking,
  leak, the P_MIN reset, potentiation and depression.

It runs in well under a minute. MNIST itself is not included. Classification
accuracy was therefore not measured, only agreement with the model.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/snn_pkg.sv tb/snn_ref_pkg.sv tb/tb_snn_top.sv --top-module tb_snn_top
./obj_dir/Vtb_snn_top
```

Replace `tb_snn_top` with any other testbench name. `snn_ref_pkg.sv` is only
needed by `tb_snn_core`, `tb_snn_top` and `tb_preprocessor`.

## Changing the design

- **Network size.** `N_IN`, `N_OUT` and `T_UNITS` are parameters of
  `snn_top`. `N_IN` must equal `IMG_W`^2.
- **Neuron and learning constants.** These are in `snn_pkg` and in the
  `exp_lut` parameters. If you change them, change the matching numbers in
  `tb/snn_ref_pkg.sv`, which the model hard-codes.
- **Synthesis.** Weight FIFOs and the image buffer are written as plain
  arrays with one write and one (synchronous, for the FIFOs) read per cycle,
  so block RAM inference is straightforward. The 784 spike countdowns, input
  ages and the popcount are registers and logic.
