# Pos-neg spike encoder and relaxed gamma-cycle control for a C3S temporal neural network

A temporal neural network (TNN) computes with spike *times*. Its columns of
neurons work in gamma cycles: windows of a fixed number of clocks, each ended by
a one-clock gamma reset (`grst`) that clears every neuron. Within a cycle, the
earlier a spike, the stronger the value it carries. Winner-take-all inhibition
means a column can spike at most once per cycle. STDP learning then adjusts each
synapse weight, depending on whether its input spike came before or after its
neuron's output spike.

This RTL adds two things to a C3S-style TNN (C3S is the cortical-column
microarchitecture framework of Nair, Shen and Smith, ISVLSI 2021):

1. **A binary-to-spike encoder** ("pos-neg" encoder). It turns an 8-bit
   grey-scale image into two 1-bit images:
   - the positive image marks pixels brighter than 127;
   - the negative image marks the rest.

   Each 1 becomes a spike at time 0 and each 0 means no spike. A 28x28 MNIST
   digit therefore becomes 1568 input spike lines. The encoder buffers a whole
   image and encodes it 49 pixels per clock, so an image takes 16 clocks.
2. **A relaxed ("asynchronous") gamma cycle.** A fixed 16-clock cycle wastes
   every clock after the network has already answered. A trained network often
   answers within about 5 clocks, so up to ~68% of each cycle is idle. A
   controller watches the final layer. Once every column of that layer has
   spiked, it ends the cycle early. One added STDP case keeps learning
   consistent when cycles are cut short: a synapse that saw neither an input
   nor an output spike gets a +0.5u weight step.

The target clock is 1 GHz. The default sizes are:
- 784-pixel images and 49 comparators;
- a 16-clock gamma period;
- a final layer of 676 columns x 12 neurons.

## Block map

```
                 image_in (784 x 8 bit)
                      |
             +--------v---------------------------+
             | posneg_image_encoder                |
             |  data_encoder <--> comparator_      |
             |  (buffer, sampler)  parallel_units  |
             |                     (49 x posneg_   |
             |                      comparator)    |
             +--------+---------------------------+
                      | image_pos_out / image_neg_out
                      v   (loaded at grst)
                  layer_in (1568 spike edges) ----> [ TNN layer 1 ... layer N ]  (outside)
                      |                                    |        ^ grst
                      v                                    | final layer spikes
   neuron_out --> 1568 x (stdp_casegen -> stdp_incdec)     v        |
                      |  syn_inc / syn_dec        gamma_cycle_control
                      v                            grst_controller (676 x spike_checker, AND)
                 (to the synapse weights)          grst_generator  (period counter, OR)
```

`c3s_enhanced_top` contains all of this except the TNN layers. The layers'
gamma reset input and spike outputs are ports of the top.

## The pos-neg encoder

### Comparator pair (`posneg_comparator`)

A pixel `inVal` produces two outputs:
- `posVal = inVal > 127`;
- `negVal = inVal <= 127`.

The description only defines "greater" and "less". A pixel equal to the
threshold is a choice made here: it counts as negative, so exactly one of the
two bits is always set. With threshold 127, `posVal` is simply bit 7 of the
pixel. The testbenches use this fact as their reference model.

### Comparator array (`comparator_parallel_units`)

This is `NCMP` comparator pairs (49 by default, a 7x7 patch) with no registers.
Lane `k` reads pixel bits `[8k+7:8k]` of the sample.

### Data encoder (`data_encoder`): buffering, sampling and collection

This is the only part of the encoder with state, and its timing is easy to get
wrong.

- **Taking an image.** An image is taken on the clock edge where both
  `image_valid` and `image_ready` are high. The whole image goes into a buffer
  of `NSAMP*NCMP` pixels, where `NSAMP = ceil(IMG_PIXELS/NCMP)`. Pixels beyond
  `IMG_PIXELS` are zero.
- **Sampling.** On each of the next `NSAMP` clocks, the low `NCMP` pixels of
  the buffer go to the comparator array, and the buffer shifts down by `NCMP`
  pixels. A sample is therefore a run of consecutive pixels of the linear
  image, not a square tile. The result is the same either way, because each
  comparator works alone.
- **Collecting the results.** The returned `posout`/`negout` bits enter two
  accumulators from the top. After `NSAMP` clocks, sample 0 has reached the
  bottom and the bits are in pixel order. On that last clock, the accumulators
  are copied to `image_pos_out`/`image_neg_out`. `next_Img_signal` is high in
  the following clock.
- **Output timing.** The outputs change only when an image completes. They are
  guaranteed valid while `next_Img_signal` is high and stay valid until the
  next completion.
- **Back-to-back images.** `image_ready` is also high in the last sampling
  clock. A source that holds `image_valid` high therefore gets one image every
  `NSAMP` clocks, with no gap.
- **Latency.** `next_Img_signal` rises exactly `NSAMP` clocks after the taking
  edge: 16 clocks for 784 pixels with 49 comparators.

If `NCMP` does not divide the image size, the spare comparators of the last
sample see zero pixels and their bits are dropped. The original design spends
energy on such "undefined" comparisons in the same way.

Clocks per image (measured by `encoder_workloads_tb`, one clock = 1 ns at 1 GHz):

| image pixels | comparators | clocks/image |
|---|---|---|
| 49 | 49 | 1 |
| 784 | 1 / 2 / 4 / 8 / 16 | 784 / 392 / 196 / 98 / 49 |
| 784 | 49 | 16 |
| 784 | 100 / 196 / 250 / 400 / 625 / 784 | 8 / 4 / 4 / 2 / 2 / 1 |
| 1028 / 1080 / 2160 | 49 | 21 / 23 / 45 |

These match the published processing times:
- 784 clocks with 1 comparator and 1 clock with 784;
- 196 clocks with 4 comparators;
- 45 times longer for a 2160-pixel image than for a 49-pixel one.

A stream of 60 images of 784 pixels takes 960 clocks.

## Relaxed gamma cycle

### Generator (`grst_generator`)

The generator is an up counter with a registered `grst` output. Each clock:

- If `grst` is high, it goes low. This is the "wait one clock" step: this clock
  counts as clock 0 of the new cycle, and `grst_control` is ignored.
- Otherwise, if the incremented count equals `PERIOD` or `grst_control` is
  high, `grst` goes high and the count restarts at 0.
- Otherwise the count increments.

Without early requests, `grst` is high for one clock in every 16. With
`grst_control` high in clock *j* of a cycle, `grst` rises on the next edge, so
the cycle lasts *j*+1 clocks. Because of the wait step, `grst` can never be
high in two consecutive clocks. Holding `grst_control` high therefore gives a
gamma reset every second clock.

### Spike checker and controller (`spike_checker`, `grst_controller`)

Each column gets a spike checker: the OR of its neuron outputs and of a flag
flip-flop. The flag's D input is that OR, masked with `not (reset or grst)`.
Once a column spikes, its checker output stays 1 until the gamma reset.

The controller ANDs all checker outputs into `grst_control`. This signal is
combinational: it rises in the same clock as the last column's first spike, so
the gamma reset follows one clock later.

Two consequences of this structure:
- While `grst` is high the flags still hold their value, so `grst_control` can
  stay high. The generator ignores it in that clock (see above), and the flags
  clear at the end of it.
- A spike that arrives in the `grst` clock itself is not remembered into the
  next cycle.

In a multi-layer network, only the last layer is connected to the controller.
The earlier layers only receive `grst`.

### Sizes

The evaluated controller sizes are 676x12, 324x10 and 121x6 (columns x neurons
per column). 676x12 is the default: it is the largest size, and the sizes that
were held fixed in the scaling studies. The 324x10 size was reported as the
best energy/delay trade-off and is a parameter change away. A smaller network
can also use the default controller: tie its unused neuron inputs to 0 and its
unused column inputs to 1, so those columns count as already spiked.

`gamma_cycle_control` connects generator and controller. It also outputs
`grst_early`, which is high together with a gamma reset that was requested
early. This output is added here for monitoring.

## STDP cases with relaxed gamma cycles (`stdp_casegen`, `pulse2edge`, `stdp_incdec`)

Spikes arrive on `ein` (the synapse input, time x) and `eout` (the neuron
output, time z). Both are edge-coded: the line rises at the spike time and
stays high until `grst`. The cases are read in the `grst` clock, at the end of
the cycle:

| bit | case | condition | update |
|---|---|---|---|
| 0 | capture | both spiked, x <= z | +u with `capture_brv` |
| 1 | minus | both spiked, z < x | -u with `minus_brv` |
| 2 | search | input only | +u with `search_brv` |
| 3 | backoff | output only | -u with `backoff_brv` |
| 4 | no spike | x = z = infinity | +u with `inf_brv` (p = 0.5, i.e. +0.5u on average) |

Internal signals:
- `e_both = ein & eout`;
- `e_one = ein ^ eout`;
- `eout_only = eout & ~ein`. This is high only if the output came first.
  `pulse2edge` holds it as `greater` until `grst`, so `greater` means "the
  output came before the input".

The case vector is one-hot; an assertion checks this. In `stdp_incdec`, each
case raises `inc` or `dec` when its Bernoulli random bit (BRV) is set. Every
update is gated by `stabilize_brv = fout_brv | min_brv`. The random bits come
from outside.

Case 4 is the addition for relaxed cycles. Before, a synapse that saw nothing
in a full-length cycle was left alone. With early resets such cycles become
common, and the rule gives them a small positive step.

In the top, the encoder's spikes all come at time 0, so the minus case cannot
occur there. It is exercised by `stdp_casegen_tb`.

## How the parts are joined (`c3s_enhanced_top`)

The two enhancements were designed as separate modules; integration into a C3S
network was left open. The top joins them as follows:

- At every gamma reset, the newest encoded image is loaded into `layer_in`:
  positive bits in `[783:0]`, negative bits in `[1567:784]`. It is held for the
  whole next cycle as time-0 spike edges. If no new image has completed, the
  same image is presented again.
- `final_layer_out[c][n]` is the layer spike input to the controller.
- One STDP case generator and inc/dec unit is attached to each `layer_in` line.
  Together they are the learning logic of one first-layer neuron, whose output
  edge comes in on `neuron_out`. `syn_inc`/`syn_dec` are valid in the `grst`
  clock. The weights themselves, and the neurons, are not part of this RTL.

Reset (`rst`) is synchronous and active high. The STDP logic uses its inverse
as its active-low `rstb`.

## Where this RTL departs from, or fills in, the published design

Fills in (the description is silent):
- The encoder's handshake (`image_valid`/`image_ready`) and its reset.
- The sample order (linear runs rather than 7x7 tiles).
- Pixels equal to the threshold count as negative.
- The exact clock in which the gamma counter restarts.
- The active-high `rst` and the active-low `rstb`.
- The insides of `pulse2edge`.
- The mapping of STDP cases 0-3 to bits. This follows the signal names of the
  case-generation schematic and the usual TNN STDP rule.
- How `stabilize_brv` is formed and what it gates.
- The join in the top.

Departs:
- The inc/dec schematic routes case 4 and `inf_brv` to the decrement side, but
  the stated rule is +0.5u. This RTL increments.
- The data encoder schematic has a `pix_update` port with no stated purpose.
  It is not built.
- The published port name `in` of the comparator array is a reserved word. It
  is `pix_in` here (and `pix_out` on the data encoder).

Not included:
- The TNN layers and the synapse weight storage. Both come from the C3S
  framework, not from this design.
- The image-file test bed used to feed MNIST files. The testbenches generate
  random images instead.
- The Linear and Log encodings, which were software experiments.

## Files

`rtl/` has one unit per file:

| file | contents |
|---|---|
| `c3s_pkg.sv` | default sizes, the STDP case enum, the BRV struct |
| `posneg_comparator.sv`, `comparator_parallel_units.sv`, `data_encoder.sv`, `posneg_image_encoder.sv` | encoder |
| `grst_generator.sv`, `spike_checker.sv`, `grst_controller.sv`, `gamma_cycle_control.sv` | gamma control |
| `pulse2edge.sv`, `stdp_casegen.sv`, `stdp_incdec.sv` | STDP |
| `c3s_enhanced_top.sv` | top |

`tb/` has one self-checking testbench per module (`<module>_tb.sv`), plus:
- `encoder_workloads_tb.sv`: the image-size and comparator-count sweep above;
- two harness modules used by the testbenches.

Each testbench:
- compares results with a reference worked out in the testbench;
- checks latencies;
- counts how often each mechanism occurred, and fails if one never did;
- ends with `TB_RESULT checks=N failures=M`;
- has a watchdog.

`c3s_enhanced_top_tb` runs the whole design at its default sizes with no
parameter overrides. It covers 40 gamma cycles, shortened and full length, 24
images, and checks all 1568 synapses' updates in every cycle.

## Simulating

Verilator 5 (the testbenches use `--timing`):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb \
    rtl/c3s_pkg.sv tb/c3s_enhanced_top_tb.sv --top-module c3s_enhanced_top_tb -o sim
./obj_dir/sim
```

Other testbenches work the same way: replace the testbench file and the top
module name. Verilator finds the other modules through `-Irtl -Itb`. The
full-size top takes a few minutes to compile and under a second to run. The
others build in seconds.

To change sizes, override the parameters of `c3s_enhanced_top` (or of a
block). Every default is in `c3s_pkg`.
