# Hybrid stochastic-binary first layer for near-sensor digit recognition

This design runs the first convolution layer of a LeNet-5 digit classifier
(28x28 greyscale input, 32 kernels of 5x5, ternary "sign" activation) right
next to an image sensor. It uses stochastic computing: each number is a
bit-stream, and its value is the fraction of ones in that stream. The
pixels never pass through an ADC. Each pixel voltage is compared with a
shared ramp, which turns it straight into a bit-stream. 784 small
stochastic engines, one per output pixel, then compute all outputs of one
kernel in parallel. Only the engine results are binary numbers. The later
layers of the network stay in ordinary binary logic (the "back end"), so
stochastic errors do not compound from layer to layer.

Stream length sets both precision and run time. A stream of 2^p clocks
gives p bits of precision, so dropping from 8 to 4 bits makes an image 16
times faster. In this design `prec` is a run-time input from 1 to 8.

## Signal path of one engine

```
pixel voltage --[comparator vs ramp]--> x_i ---+--AND-- w_pos_i --+
                                               |                  +--> TFF adder tree --> counter --+
                                               |                  |         (25 -> 1)              |
                                               +--AND-- w_neg_i --+--> TFF adder tree --> counter --+--> sign comparator
                                                                                                         (+1 / 0 / -1)
```

* **Pixel streams (ramp compare).** The ramp rises by one step per clock
  across the stream. A pixel at a fraction v of full scale therefore gives
  `ceil(v * 2^p)` ones followed by zeros. The stream is completely
  auto-correlated, and that is acceptable only because the adders below do
  not care about correlation.
* **Weight streams (low-discrepancy).** Each signed weight is split by sign.
  Its magnitude drives a positive stream `w_pos` or a negative stream
  `w_neg`, and the other stream stays all zero. All 50 comparators share
  one sequence source, the base-2 van der Corput sequence (a bit-reversed
  step counter). All 784 engines share the same weight streams. A
  magnitude m gives exactly m ones in 2^p clocks, evenly spread, so the
  AND of a head-run pixel stream with a weight stream is close to the exact
  product.
* **Multiplication** is an AND gate. Because the weights are split, every
  operand is unipolar (0..1). This keeps the sign decision away from the
  50 % stream density where bipolar coding is noisiest.
* **Addition (TFF adder).** A conventional stochastic adder is a mux driven
  by a random select stream. This design uses a toggle-flip-flop adder
  instead:

  ```
  differ = x ^ y
  z      = differ ? q : y        // q is the TFF state
  q     <= differ ? ~q : q
  ```

  Where x and y agree, their common bit passes through. Where they differ,
  the output alternates 0,1,0,... for initial state S0 = 0. The output
  therefore holds exactly `floor((ones(x)+ones(y))/2)` ones, for any
  correlation between the inputs and with no random source. With S0 = 1 it
  holds the ceiling. For example, X = 0100 1010 (3/8) and Y = 0010 0010
  (1/4) give 0010 0010 with S0 = 0 and 0100 1010 with S0 = 1. The 25
  products are padded with zero streams to 32 and summed by a balanced tree
  of 31 such adders. Each sum stream therefore has value sum(x_i*w_i)/32,
  give or take one rounding per tree level.
* **Back to binary.** Each sum stream is counted into a 9-bit counter. The
  comparator then outputs +1 if `cnt_pos - cnt_neg > thresh`, -1 if
  `cnt_neg - cnt_pos > thresh`, and 0 otherwise. A non-zero `thresh` is
  "soft thresholding": it forces near-zero results, where stochastic error
  dominates, to 0.

## Schedule of one image

The engine array evaluates one kernel at a time, so an image takes 32
passes. The controller (`conv_controller`) runs each pass as follows:

| phase  | cycles | what happens |
|--------|--------|--------------|
| PREP   | 1      | weight store reads kernel k; ramp, sequence counter, all TFFs and counters restart |
| STREAM | 2^prec | one stream bit per clock through all 784 engines |
| WRITE  | 1      | counters are final; the 28x28 plane of signs for kernel k goes into the result buffer, `plane_valid` pulses |

One image takes `32 * (2^prec + 2)` clocks from the cycle after `start`,
and `done` pulses at the end. That is 8256 clocks at 8 bits and 576 at
4 bits. The sensor voltages must be held for the whole image.

## Modules

| file | role |
|------|------|
| `snn_pkg.sv` | sizes (28, 5, 25, 32, 8), sign code `sign_e` (01 = +1, 11 = -1, 00 = 0), `weight_t` = {neg, mag[7:0]} with value +/-mag/256, `plane_t` |
| `tff_adder.sv` | two-input TFF adder |
| `sc_adder_tree.sv` | N-input adder, zero-padded balanced tree of `tff_adder` |
| `sc_counter.sv` | stream-to-binary counter |
| `sign_comparator.sv` | ternary activation with soft threshold |
| `stoch_dot_product_unit.sv` | one engine: 2x25 AND, two trees, two counters, comparator |
| `weight_sng.sv` | shared van der Corput source and 50 weight comparators |
| `stoch_conv_array.sv` | 28x28 engines with 5x5 windows, zero-padded at the edges |
| `kernel_weight_store.sv` | 32 x 25 weight register file; one-weight writes, whole-kernel registered reads |
| `conv_controller.sv` | pass sequencer (above) |
| `intermediate_buffer.sv` | 32 result planes for the back end; registered read by kernel |
| `stoch_conv_core.sv` | synthesizable digital core: all of the above |
| `ramp_generator.sv` | behavioural model (real-valued) of the ramp |
| `a2s_converter.sv` | behavioural model (real-valued) of one pixel comparator |
| `hybrid_snn_top.sv` | ramp + 784 comparators + core; pixel voltages come in as `real` ports |

Using the top:
1. Load the weights with `wt_we`/`wt_kernel`/`wt_tap`/`wt_data`.
2. Drive `sensor_v[r][c]` with values from 0.0 to 1.0.
3. Set `prec` and `thresh`, then pulse `start`.
4. After `done`, read plane k with `buf_rd_kernel = k`. `buf_rd_plane` is
   valid one clock later.

Tap i of a window is pixel (r + i/5 - 2, c + i%5 - 2). At precision p < 8
the weight magnitude is truncated to its top p bits.

## How far it follows the source design, and where it departs

The following come from the source design:
* the ramp-compare pixel conversion
* low-discrepancy weight streams shared by all engines
* AND multipliers and the TFF adder, including its initial state S0 = 0
* pos/neg weight split with two counters and a comparator
* ternary sign activation and soft thresholding
* 784 parallel engines and 32 kernel passes per image

The following are this design's own choices:
* the particular low-discrepancy sequence (van der Corput)
* the 32-leaf zero-padded tree
* zero padding at the image border
* the sign-magnitude weight format and magnitude truncation at low precision
* applying the threshold to the count difference
* the weight store, the result buffer and all port protocols
* the PREP/STREAM/WRITE schedule and run-time precision

Departures:
* **Counters are synchronous.** The source design uses asynchronous ripple
  counters so that the stochastic part can be clocked faster. The counts
  are the same; only the circuit timing differs, and RTL does not capture
  that.
* **Analog parts are models.** The ramp and the pixel comparators are
  `real`-valued behavioural models, not circuits. The photodiodes are not
  modelled: their voltages are inputs.
* **No binary back end.** Max pooling, the second convolution, the fully
  connected layers and softmax are not included. The result buffer read
  port is where they would connect.
* **Weight scaling** (normalising each kernel to full range) is an offline
  step on the weights and is not hardware here.
* `hybrid_snn_top` is not synthesizable because of its `real` ports.
  `stoch_conv_core` is the synthesizable boundary.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. The reference
models in `tb/sc_ref_pkg.sv` are written separately from the RTL: a
bit-level TFF adder, a procedural adder tree, the van der Corput value and
a whole-stream engine. The TFF adder test uses the worked examples above,
plus the length-20 example:

* X = 0110 0011 0101 0111 1000
* Y = 1011 1111 0101 0111 1111
* Z = 0110 1011 0101 0111 1101

The controller, core and top tests also check latency and pass order. The
end-to-end test `tb_hybrid_snn_top` runs the top at 10x10 pixels and 4
kernels. It runs one image at 8 bits with threshold 3 and one at 4 bits.
It compares every result with the reference and requires each of these to
occur at least once:
* +1, -1 and 0 results
* results forced to 0 by the threshold
* windows cut by the image edge
* a change of precision

The largest size simulated is that 10x10, 4-kernel top, plus an 8x8,
4-kernel core. The full 28x28, 32-kernel design lints and elaborates
cleanly, but its C++ model did not finish compiling in 15 minutes, so the
full-size run has not been done.

Example (plain Verilator):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb rtl/snn_pkg.sv tb/sc_ref_pkg.sv \
  $(ls rtl/*.sv | grep -v snn_pkg) tb/tb_hybrid_snn_top.sv --top-module tb_hybrid_snn_top
./obj_dir/Vtb_hybrid_snn_top
```

## What the sizes mean for the evaluated workloads

The evaluation is the MNIST first layer at 2 to 8 bits of precision. At the
default parameters each of those fits: 28x28 engines, 32 stored kernels,
and a stream of up to 2^8 bits. The precisions differ only in run time,
`32*(2^p+2)` clocks per image. Classification accuracy cannot be measured
on this RTL alone, because it needs the binary back end and trained
weights.
