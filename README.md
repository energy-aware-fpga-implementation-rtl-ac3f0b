# A 4096-512-2 spiking neural network accelerator with first-order LIF neurons

This design classifies a 64x64 grey camera image as *collision* or *no collision*, for example on a
small drone or ground robot. It runs a fully connected spiking neural network: 4096 inputs, one per
pixel, then 512 hidden leaky integrate-and-fire (LIF) neurons, then 2 output LIF neurons. The network
runs for 25 time steps. Each step, every pixel becomes a 0/1 spike that is random, with probability
equal to the pixel's brightness. This is *rate coding*. Because the inputs are single bits, no
multiplier is needed. "Weight times input" is a multiplexer that picks the weight or 0. A neuron's
whole input current is one adder tree over its 4096 selected weights. The neurons' outputs are
single bits too, so a shift register is enough to pass them from one layer to the next.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. Its default parameters give the full
network. It follows a published FPGA design for collision avoidance with first-order LIF neurons.
Where that description leaves a detail open, this RTL makes a choice. Each choice is marked as
such in the file headers and in the sections below.

## Number format

Weights, biases, thresholds and membrane potentials are 16-bit signed Q1.15 values, so they lie in
[-1, 1) in steps of 2^-15. An adder tree over 4096 such values needs 16 + log2(4096) = 28 bits, and
its result keeps 15 fraction bits. The bias is added after the tree. The new potential is then
*saturated* back to Q1.15: it is clamped to -1 or to 1 - 2^-15 rather than wrapping. Saturation is
this design's way of keeping every value in [-1, 1).

## The neuron

One `lif_unit` serves a whole layer, one neuron per clock cycle. It keeps every neuron's potential
U in its own register. When neuron j is updated with adder-tree result S and bias b:

    U'    = sat( (U >>> beta_shift) + S + b - u_rest )
    spike = (U' >= threshold) and neuron j is not refractory
    U     = spike ? 0 : U'

This is the discrete LIF equation U[t+1] = beta*U[t] + I[t+1] - U_rest. The leak factor beta is a
power of two, 2^-beta_shift, so the leak is a single arithmetic right shift. That matches the
shift-register-adder-comparator loop of the original block diagram. Note that beta = 1
(beta_shift = 0) with u_rest = 0 gives the Lapicque integrate-and-fire neuron, which has no leak.
Threshold, u_rest and beta_shift are runtime inputs, one set per layer (`lif_cfg_t`), because they
are trained values. A neuron fires when it reaches or passes its threshold, and firing resets it
to 0.

**Refractory period** (`cfg.refrac_en`, `REFRAC` = 5). After a spike, a neuron cannot fire in the
next 5 time steps. Each neuron has a 3-bit down-counter that is loaded with 5 on a spike and
counted down at each of its later updates. While the counter is non-zero, a threshold crossing is
suppressed: there is no spike and no reset, and the potential keeps integrating. The behaviour
while refractory, and the option to switch the period off, are this design's choices.

## Datapath and schedule

```
 pixels --> rate_encoder --> input_memory (4096 x 1 bit, all bits read at once)
                                   |
 weight_memory L1 (512 rows x 4096 x 16 bit, one row per cycle)
                                   v
                 cascaded_adder (4096 mux + adder tree) --28b--> lif_unit (512 neurons)
                                                                    | 1 bit per cycle
                                                      spike_shift_register (512 bits)
 weight_memory L2 (2 rows x 512 x 16 bit)                           v
                 cascaded_adder (512 mux + adder tree) --28b--> lif_unit (2 neurons)
                                                                    | 1 bit per cycle
                                            output_memory (2 spikes + 2 spike counters)
                                                                    v
                                   class_comparator --> class_out (0 collision, 1 no collision)
```

`control_unit` repeats the following for each of the 25 time steps:

| phase  | cycles              | what happens |
|--------|---------------------|--------------|
| LOAD   | 4096 (+ host stalls) | The host streams the image, one pixel per cycle. The rate coder turns each pixel into a spike for this step and writes it to the input memory. |
| PHASE1 | 512 + 1             | One layer-1 weight row is read per cycle. One cycle later, that hidden neuron's sum is formed and the neuron is updated. Its spike is shifted into the 512-bit register. |
| PHASE2 | 2 + 1               | The same for the two output neurons, with the 512 hidden spikes as inputs. Output spikes are counted. |

After the last step, PHASE3 takes 2 cycles. The comparator walks through the two spike counts and
picks the higher one; a tie goes to neuron 0 (collision). `done` is then high for one cycle, with
`class_out`, `class_count` and `spike_counts` valid. One inference therefore takes
25 * (4096 + 513 + 3) + 2 + 1 = 115,303 cycles, plus any cycles the host stalls the pixel stream.
At the 67 MHz clock reported for the original FPGA build, that is about 1.7 ms.

The phase lengths of 512 and 2 cycles, one neuron per cycle, come from the original design. The
extra cycle in each phase is the latency of the synchronous weight read. The cost of one neuron per
cycle is a 4096-input combinational adder tree, which is left unpipelined here. For timing closure
you would pipeline it. Each pipeline stage adds one cycle per phase and needs `rd_tag`/`rd_valid`
delayed to match.

The image is re-sent for every time step, and each time it is coded with fresh random numbers. The
rate coder's LFSR is reseeded at `start`, so the same image and the same weights always give the
same result.

## Rate coding

`rate_encoder` compares the pixel with the low 8 bits r of a 16-bit maximal-length LFSR
(x^16 + x^14 + x^13 + x^11 + 1, seed 0xACE1), and the LFSR advances once per pixel. The spike is
(r < pixel), so its probability is pixel/256. Pixel value 255 always spikes and 0 never does, so
white gives p = 1 exactly and black p = 0. The pixel width, the LFSR and the full-scale rule are
this design's choices.

## Host interface of `snn_top`

* **Load weights while idle.** Set `wl_en` and write one value per cycle.
  * Layer 1 (`wl_layer = 0`): `wl_row` is the hidden neuron (0..511) and `wl_col` the pixel
    (0..4095).
  * Layer 2 (`wl_layer = 1`): `wl_row` is the output neuron and `wl_col` the hidden neuron.
  * `wl_bias = 1` writes the row's bias instead of a weight.
  * An assertion flags a load during an inference.
* **Set `cfg_hid` and `cfg_out`.** Each holds a threshold, u_rest, beta_shift and refrac_en. Keep
  them stable while an inference runs.
* **Run an inference.**
  1. Pulse `start`. This clears all potentials, refractory counters and spike counters.
  2. For each time step, send the 4096 pixels in raster order. Use `pix_valid`; a pixel is taken
     in any cycle where `pix_ready` is also high.
  3. Wait for `done`.
* **Observation ports `hid_*` and `out_*`.** They show every neuron update as it happens: index,
  potential after the update, spike, saturation and refractory suppression.

## Files

| file | block |
|------|-------|
| `rtl/snn_pkg.sv` | Sizes, Q1.15 constants, `lif_cfg_t`, controller states, saturation function |
| `rtl/rate_encoder.sv` | Pixel to Bernoulli spike |
| `rtl/input_memory.sv` | One 1-bit frame, read in parallel |
| `rtl/weight_memory.sv` | Weights and biases of one layer, one row per cycle (used twice) |
| `rtl/cascaded_adder.sv` | Multiplexers and balanced adder tree (used twice) |
| `rtl/lif_unit.sv` | Time-multiplexed LIF neurons of one layer (used twice) |
| `rtl/spike_shift_register.sv` | Hidden spikes, serial to parallel |
| `rtl/output_memory.sv` | Output spikes of the step and spike counts |
| `rtl/class_comparator.sv` | Maximum search over the counts |
| `rtl/control_unit.sv` | Phase sequencer |
| `rtl/snn_top.sv` | Top level |

Each block has a self-checking testbench `tb/tb_<block>.sv`. Each testbench compares the block
with a reference written independently in the testbench, and prints
`TB_RESULT checks=N failures=M`. The end-to-end tests share `tb/snn_top_tb_body.svh`. It loads
random weights through the load port and runs two inferences of a random image: one with the
refractory period on and one with it off. A reference model predicts every hidden and output
neuron update, the spike counts and the class. The test also checks the cycle count of each
inference. It counts hidden and output spikes, saturations, refractory suppressions and pixel-stream
stalls, and fails if any of them never happened.

* `tb_snn_top` runs this at 64 pixels and 16 hidden neurons, in a few seconds.
* `tb_snn_top_full` runs it at the full default size: it loads all 2,098,176 weights and runs two
  25-step inferences, in about half a minute.

* `tb_snn_lapicque_32x32` runs the same test at full size with two other network variants. The
  image is 32x32: 1024 pixels are used, and the rest are black with zero weights. The neurons
  are Lapicque neurons: beta_shift = 0 and u_rest = 0 in both layers.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb rtl/snn_pkg.sv tb/tb_snn_top_full.sv \
          --top-module tb_snn_top_full -o sim && obj_dir/sim
```

Use the same command with any other `tb_*` for the block tests. Every top-level parameter can be
changed (`IMG_SIZE`, `NU_L2`, `NU_L3`, `T_STEPS`, `REFRAC`, `PIX_W`, `SUM_W`). To change the
network size, change the parameters and load weights to match.

## Where this RTL departs from, or adds to, the original description

* **Weight storage.** The layer-1 weights are 4096 x 512 x 16 bits = 33.6 Mbit. Here they are a
  plain array with a row-wide read. That is more block RAM than any Artix-7 device has (the largest
  has about 13 Mbit), and more than the register and LUT counts reported for the original build
  could hold. How the original system stored the weights is not known. A real build would stream
  the weights from external memory or store fewer bits per weight.
* **Leak as a shift.** beta is limited to powers of two (1, 1/2, 1/4, ...). A trained beta such as
  0.9 must be rounded to one of these.
* **Time-step sequencing, spike counting, tie rule, class order (neuron 0 = collision) and all
  handshakes** are this design's own. The original states only that the output layer's spikes are
  stored and compared.
* **Output memory size.** One label of the original diagram gives it 512 x 1 entries, but it holds
  the spikes of the 2 output neurons. This RTL uses 2.
* **Not modelled:** the camera, the training of the network (threshold, beta and weights come from
  offline training), and clock frequency and power.
