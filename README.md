# A CNN self-trigger core for radio detection of air showers

Radio antennas at a cosmic-ray observatory record short bursts of radio emission from
extensive air showers. At a noisy (urban, RFI-rich) site a simple amplitude threshold cannot
tell those bursts from man-made transients, so radio stations usually wait for an external
trigger from particle detectors. This design lets a station trigger itself. Each 128-sample
window of the digitised, band-passed antenna signal goes through a small 1-D fully
convolutional network that runs in 13-bit fixed point on an FPGA. The network gives a logit.
When the logit is above a programmable threshold, the core raises a first-level trigger.

The network topology, the number format (`ap_fixed<13,5>`), the trace length and the PRBS
stimulus used for power measurements come from the published study that proposed this
trigger. That study built its core with a high-level synthesis flow and did not describe the
hardware structure. The micro-architecture below (one shared MAC array stepping through the
layers) is therefore this design's own. So are a few network details that the study left open.
They are listed under "Departures and open points".

## The network

Input: 128 samples, one channel. Inference form: batch normalisation is folded into the
preceding convolution's weights and bias, and dropout is removed.

| Layer | Operation                          | In -> out ch | Kernel | Positions | After the convolution        | Weights |
|-------|------------------------------------|--------------|--------|-----------|------------------------------|---------|
| L0    | block 1 convolution                | 1 -> 16      | 3      | 128       | ReLU, max-pool 2 -> 64       | 48      |
| L1    | block 2 convolution, result `z`    | 16 -> 32     | 3      | 64        | ReLU                         | 1 536   |
| L2    | residual branch F, first conv      | 32 -> 16     | 3      | 64        | ReLU                         | 1 536   |
| L3    | residual branch F, second conv     | 16 -> 32     | 3      | 64        | ReLU, `+ z`, max-pool 2 -> 32| 1 536   |
| L4    | bottleneck W1                      | 32 -> 32     | 1      | 32        | ReLU                         | 1 024   |
| L5    | bottleneck W2                      | 32 -> 32     | 3      | 32        | ReLU                         | 3 072   |
| L6    | bottleneck W3                      | 32 -> 64     | 1      | 32        | (no ReLU), max-pool 2 -> 16  | 2 048   |
| head  | global average over 16 positions, dense 64 -> 1 | |     |           | logit, compare with threshold| 64      |

Kernel-3 convolutions use stride 1 and zero padding of one sample on each side, so a layer
has as many output positions as input positions. With the 224 biases and the dense bias,
the model has 11 089 parameters. No layer has more than 4 096 weights. The study kept under
that limit because its synthesis tool failed on larger weight arrays.

## Arithmetic

Every stored value is `ap_fixed<13,5>`: 13-bit two's complement with 8 fraction bits, so the
range is -16 to +15.996 and the step is 1/256. A convolution output is computed as follows:

1. Multiply inputs by weights at full precision (16 fraction bits).
2. Sum the products in a 32-bit accumulator, then add `bias << 8`.
3. Requantise: arithmetic shift right by 8, which truncates toward minus infinity. Then keep
   the low 13 bits, which wraps around on overflow. These are the default rounding and
   overflow modes of `ap_fixed`.
4. ReLU, where the layer has one.
5. For L3 only: a 13-bit wrapping add of the residual `z`.
6. Max-pool over positions 2r and 2r+1, where the layer pools.

The global average is the per-channel sum shifted right by 4, which is exact for 16
positions, then truncated to 13 bits. The dense layer uses the same multiply, add-bias and
requantise steps as the convolutions. The study chose its 5 integer bits so that trained
activations do not overflow. Wrap-around therefore only matters for weights that were not
trained with this format.

## How the core computes a trace

Finding the right weights and data for each cycle is the least obvious part of the design.

**One MAC step.** `mac_array` has `OC_LANES x 3 x IC_LANES` multipliers: 32 x 3 x 16 = 1 536
by default. In one clock it takes a window of 3 consecutive positions by 16 input channels.
It multiplies that window by the weights of 32 output channels and adds each output channel's
48 products to that channel's accumulator. A layer is processed as three nested loops,
outermost first:

- conv position `p`
- output-channel group `g` (32 channels each)
- input-channel chunk `c` (16 channels each)

The accumulators are cleared on the first chunk of each `(p, g)`. After the last chunk, the
finished group goes to the write-back stage in the following clock. Kernel-1 layers use only
the centre tap, and the two outer taps are fed zeros. Input lanes outside the layer's channel
count, or outside the trace (the padding), are also fed zeros.

MAC steps per layer: L0 128, L1 64, L2 128 (two chunks), L3 64, L4 64, L5 64, L6 128 (two
groups x two chunks). That makes 640 steps in total. One idle cycle after each layer
guarantees that the next layer reads only rows that have been written. The head then takes
about 19 cycles. **A trace takes 666 clocks from the start of the engine to the result,
which is 3.33 us at 200 MHz.** The study reported 1.99 to 6.51 us for its cores, depending on
the FPGA.

**Feature maps.** Three buffers, A, B and C, each hold 64 positions x 64 channels. Each
layer reads one buffer and writes another:

| Layer | reads     | writes | residual from |
|-------|-----------|--------|---------------|
| L0    | trace     | B      |               |
| L1    | B         | A (`z`)|               |
| L2    | A         | B      |               |
| L3    | B         | C      | A             |
| L4    | C         | A      |               |
| L5    | A         | B      |               |
| L6    | B         | C      |               |
| head  | C         |        |               |

Each buffer has three row-read ports for the three taps and a fourth port for the residual.
All four read asynchronously. A write stores one 32-channel group of one row, lane-masked.
Max-pooling does not read back from memory. At an even position `post_proc` holds the
group's values, and at the next odd position it writes the larger of each pair to row `p/2`.

**Weights.** `weight_mem` stores the convolution weights as 13 wide words, one per
`(layer, g, c)` combination. Word `w_base(layer) + g * n_chk + c` holds the 32 x 3 x 16
values for the MAC step. With the default lanes, the first words of L0 to L6 are
0, 1, 2, 4, 5, 7 and 9. The package function `w_base` computes these values for any lane
split.

## Trace capture, drops and PRBS mode

`trace_buffer` divides the sample stream into consecutive, non-overlapping 128-sample
windows, numbered from 0 after reset. It has two banks: one is filled while the engine reads
the other. If neither bank is free when a window starts, the whole window is skipped and
`traces_dropped` counts it. Each result carries the number of its window
(`result_trace_id`).

Samples enter `SPC` per clock (default 2, `sample[0]` earliest). The study sampled at 250 MS/s
and clocked its core at 200 MHz, which needs more than one sample per clock. A 250 MS/s
digitiser produces a window every 0.51 us (102 clocks), and a classification takes 3.3 us.
Without a pre-selection in front of the core, about one window in 6.5 is classified.

When `prbs_mode` = 1, the samples come from `prbs32` instead: a 32-bit Fibonacci LFSR with
polynomial x^32 + x^22 + x^2 + x + 1, whose bits [12:0] and [25:13] form the two samples of each clock. The
study used this stimulus to keep the datapath busy while estimating power.

## Interface of `aitrig_top`

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; active-low synchronous reset |
| `sample_valid`, `sample` | in | 1, 13 x `SPC` | band-passed, normalised sample stream in `ap_fixed<13,5>` |
| `prbs_mode` | in | 1 | take samples from the internal LFSR |
| `ld_valid`, `ld_sel`, `ld_layer`, `ld_oc`, `ld_ic`, `ld_k`, `ld_data` | in | 1,2,3,7,6,2,13 | parameter load, one value per clock |
| `threshold` | in | 13 | trigger when `logit > threshold` (signed) |
| `result_valid` | out | 1 | one-clock pulse per classified window |
| `trigger`, `logit`, `result_trace_id` | out | 1, 13, 32 | result, valid with `result_valid` |
| `busy`, `traces_dropped`, `last_latency` | out | 1, 32, 16 | status; latency in clocks |

**Loading parameters.** `ld_sel` selects the kind of value being loaded:

- `LD_CONV_W`: weight `(ld_oc, ld_ic, ld_k)` of layer `ld_layer`. Taps count from the
  earliest sample (0..2). For L4 and L6, `ld_k` is 0.
- `LD_CONV_B`: the folded bias of channel `ld_oc` of layer `ld_layer`.
- `LD_FC_W`: dense weight `ld_oc`.
- `LD_FC_B`: the dense bias.

Folding batch norm into the convolution works as follows. With `s = gamma / sqrt(var + eps)`,
the weight becomes `w * s` and the bias becomes `(b - mean) * s + beta`. Both are then rounded
to `ap_fixed<13,5>`. Parameters must be loaded before the first trace arrives. Nothing is
reset.

## Departures and open points

- **Network details left open in the study.** The residual branch's intermediate width is
  taken as 16, and the bottleneck's as 32 (package constants `RES_MID`, `B3_MID`). The study
  says only that these are "reduced". The residual branch's kernels are taken as size 3. The
  study quotes about 15 000 parameters; this choice gives 11 089.
- **ReLU placement.** One general sentence in the study says ReLU follows all but the
  final convolution of each block. The detailed descriptions contradict it: block 1's single
  convolution has a ReLU, and both convolutions in the residual branch have one. The design
  follows the detailed descriptions, so every layer has a ReLU except L6. The residual sum is
  not passed through a ReLU.
- **Padding.** Only the first block's padding (1) is stated. All kernel-3 layers are taken to
  pad the same way. With that padding, the three pools reduce 128 positions to 16.
- **Batch norm** is folded into the convolutions. A flow that keeps batch norm as a separate
  quantised layer rounds at one more point, so the results can differ in the last bit.
- **Accumulation** is done at full precision with one truncation per output. A flow that
  truncates every product separately can also differ in the last bit.
- **Input normalisation and the 30-80 MHz band-pass filter** are not part of the core. The
  study trained on normalised, filtered traces but did not specify either step, so the core
  expects samples that are already filtered and scaled.
- **Pruning.** The study prunes half the convolution weights. Here the pruned weights are
  loaded as zeros and still use multipliers; the sparsity is not exploited.
- **No sigmoid.** The logit is compared directly. The sigmoid is monotonic, so a threshold on
  the logit selects the same traces as the matching threshold on the sigmoid score.
- **Threshold.** The chosen operating point (false-positive rate 1e-4) depends on the trained
  weights, so the threshold is an input.
- **Schedule and resources.** The layer-by-layer schedule, the lane counts, the buffering and
  the drop policy are this design's own. The 1 536 multipliers are close to the roughly
  2 100 DSP slices the study's core used. On a Kintex UltraScale xcku040 (1 920 DSPs) they fit
  as 13 x 13 DSP multiplies. On a Zynq xc7z020 (220 DSPs) they do not. The study's core did
  not fit there either.
- **Timing.** The issue cycle does the window gather, the weight-word read, the multiply and a
  48-input adder tree. At 200 MHz this path would need a pipeline register after the multipliers.
  One register there would add one clock per layer.
- **Not included:** the SNR-threshold trigger, which the study used only as a baseline. Also
  not included: the FFT-based RFI filter, which the study mentions as future work.

## Files

`rtl/aitrig_pkg.sv` contains the shared types, the layer table (`layer_shape`), the
word-address functions and `requant`. There is one module per file:

- `aitrig_top`: the top level, window gather and pipeline registers
- `trace_buffer`: trace capture
- `prbs32`: the PRBS stimulus
- `layer_sequencer`: the schedule
- `mac_array`: the multipliers and accumulators
- `weight_mem`: the weights and biases
- `act_buffer`: the feature-map buffers
- `post_proc`: bias, ReLU, residual add and pooling
- `cnn_head`: the average, the dense layer and the threshold compare

The top's parameters `OCL`, `ICL` and `SPC` set the lane counts and the samples per clock.
Their defaults are the package constants `OC_LANES`, `IC_LANES` and `SAMPLES_PER_CLK`. The word table and the
sequencer follow them. Changing the network shape means editing `layer_shape` and the buffer
plan in the package.

## Simulation

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/aitrig_pkg.sv tb/tb_aitrig_top.sv --top-module tb_aitrig_top
./obj_dir/Vtb_aitrig_top
```

`tb_aitrig_top` runs the full-size core. It loads random parameters and streams random
samples faster than the core can classify them, so windows are dropped. It then switches to
PRBS mode. For every result it recomputes the whole network in plain integer arithmetic for
the reported window, and compares the logit bit for bit. It also checks the trigger decision
and the 666-clock latency. It counts results, triggers that fired, triggers that stayed
quiet, drops, PRBS-mode results and ReLU clamps. The test fails if any of these never
happened.

`tb_workload_stream` runs the continuous-trigger case at the real rate: 250 MS/s into the
200 MHz core, which is two samples on 5 of every 8 clocks, for 60 windows. Each result is checked
against the same integer model. The test also checks four things. Every window is either
classified or counted as dropped. The core waits no more than its one start cycle while a trace
is ready. One trace is classified per 667 clocks. About one window in 6.5 gets classified. In
the run, 10 of the 60 windows are classified and 50 are dropped. That makes about 0.3 million
trigger trials per second at 200 MHz, against the 1 MHz the study asks for.

The weights are random, not trained, so these tests show that the hardware computes the
stated network exactly. They say nothing about how well it classifies. Reproducing the
study's efficiency needs its trained weights.
