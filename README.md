# CapsBeam accelerator: a capsule-network ultrasound beamformer in SystemVerilog

Plane-wave ultrasound fires every transducer element at once and records the
echoes on all 128 channels. A beamformer turns those time-of-flight-corrected
RF samples into an image. CapsBeam does it with a small capsule network:

- two 3x3 convolutions look at each pixel's neighbourhood across all 128
  channels;
- each of two branches (the in-phase image I and its Hilbert partner Q) then
  runs a 3x3 convolutional capsule layer, per-pixel dynamic routing over
  8 capsules of 8 values, and two per-pixel dense layers (64 to 64, then
  64 to 1).

The weights are compressed about 85 % by kernel pruning: whole 3x3 kernels
are removed. In the first layer, for example, only 98 of the 128 input-channel
kernels of each filter are kept, and there are 84 filters.

This RTL is an accelerator for that network. It has:

- a row-streaming convolution engine built around a 4 x 128 array of
  multiply-accumulate PEs;
- a dynamic-routing engine with its own exponential, square-root and divide
  units;
- a small controller.

A host runs the network one layer at a time. For each layer it writes a layer
descriptor and streams in the weights and the feature map, and the
accelerator streams the result back. Everything is 16-bit fixed point.

## Block map

```
               cfg/start            busy/done/layers_done
                   |                        ^
             +-----v------------------------+-----+
             |          layer_controller          |
             +--+-------------------------+-------+
   weights ---->|                         |
  (DMA 1)       v                         v
             +--------------------+   +------------------------+
 act rows -->|    conv_module     |   |    dynamic_routing     |
  (DMA 2)    | index_control      |   | 2 pixels x 8 mac_pe    |
             | pe_array 4x128     |   | 16 squash_exp_unit     |
             |  (mac_pe each)     |   |                        |
             +---------+----------+   +-----------+------------+
                       +------------+-------------+
                                    v
                              output stream (DMA 2)
```

| File | Role |
|---|---|
| `capsbeam_pkg.sv` | sizes, Q8.8 helpers, `layer_cfg_t` descriptor, tap descriptor |
| `mac_pe.sv` | one PE: `out_col = out_col_part + in_act*in_wgt`; weight register `R` passes `in_wgt` on |
| `pe_array.sv` | 4 rows x 128 columns of PEs; weights ripple along each row |
| `index_control.sv` | kernel-index store: input channel of every kept kernel, 4 banks |
| `conv_module.sv` | Algorithm-1 style row loop: line buffer, weight/bias store, output buffer |
| `squash_exp_unit.sv` | Taylor exponential, bit-serial square root, restoring divider |
| `dynamic_routing.sv` | per-pixel routing loop (softmax, weighting, squash, agreement) |
| `layer_controller.sv` | starts one engine per layer and steers the streams to it |
| `capsbeam_accel.sv` | top level; its ports are the stream and register interfaces |

The host processor, the AXI interconnect, the two DMA engines and DDR memory
are outside the design. Their connections appear as ports of
`capsbeam_accel`.

## Numbers and streams

- **Fixed point.** Activations, weights and biases are signed 16-bit Q8.8
  (8 fraction bits). Products and sums are kept in 32-bit Q16.16 and brought
  back to Q8.8 by an arithmetic right shift of 8 with saturation. The 8/8
  split is this design's choice; only "16-bit" is given.
- **Streams.** All three streams use AXI-Stream style `tvalid`/`tready`. Each
  beat carries four 16-bit values, lane 0 in bits 15:0. The output stream
  raises `tlast` on the final beat of a layer. Either side may stall at any
  time; the testbenches insert random gaps and back-pressure.
- **Layer descriptor** (`layer_cfg_t`, sampled at `start`):

  | Field | Meaning |
  |---|---|
  | `op` | `OP_CONV` or `OP_ROUTE` |
  | `num_rows` | image height |
  | `num_cols` | image width, at most 128 |
  | `num_in_ch` | input channels, a multiple of 4, at most 128 |
  | `num_kept` | kept kernels per filter, at most 98 |
  | `num_filters` | output channels, a multiple of 4, at most 84 |
  | `k3` | 1 for a 3x3 kernel, 0 for 1x1 |
  | `relu` | apply ReLU |
  | `num_iter` | routing iterations |

## The convolution engine

### Row loop and line buffer

The engine keeps the complete pruned weight set of one layer on chip. It
streams the image through one row at a time. The weight stream comes first,
in this order:

1. all weights, ordered `[filter][kept kernel][ky][kx]`;
2. one bias per filter;
3. one channel index per kept kernel. The index says which input channel that
   kernel convolves.

The store is banked by `filter mod 4`, so the four PE rows read their four
filters in the same cycle.

The input rows land in a three-row line buffer holding the row above, the
current row and the row below:

- **Top.** The buffer starts with a zero row above the image.
- **Bottom.** The last output row is computed with a zero row below it.
- **Left and right.** Columns outside the image read as zero, so a 3x3 layer
  keeps the image size.
- **Between rows.** The buffer shifts up by one row.

To overlap loading with computing, a staging row buffer takes the row two
ahead while the current row is computed and streamed out. From the second
output row on, the activation stream never waits for the array.

### Weight passing in the PE array

Each PE row works on one filter of the current group of four. Each PE column
works on one image column. For every kept kernel and every tap of the four
filters, one weight per row enters column 0. It then moves one column per
cycle through the PE weight registers, so column `c` sees a weight `c` cycles
after column 0.

Each weight travels with a small tap descriptor (`tap_meta_t`). The
descriptor gives:

- the input channel, taken from the index store;
- the kernel row and column;
- the filter group;
- whether this tap opens or closes a sum.

The convolution engine reads each PE's descriptor and feeds that PE the
line-buffer value at (kernel row, its column + kx - 1, channel). No per-PE
addressing logic sits inside the array.

A PE's sum starts at the "first" tap and completes at the "last" tap. It
leaves the array one cycle later, column by column. The result is rounded to
Q8.8, passed through ReLU (if enabled), added to the bias, and written into
the 4 x 21 x 128 output buffer. ReLU comes before the bias because that is
the order Algorithm 1 lists them in.

When all groups are done, the row is streamed out column by column, four
filters per beat. A group of four filters costs `num_kept x 9` issue cycles.
The next group's weights follow directly behind, so the array pipelines
across groups without bubbles.

### Dense layers

The per-pixel dense layers run on the same engine in 1x1 mode (`k3 = 0`):

- each filter keeps all of its input channels;
- the index store holds 0, 1, 2, … in order;
- a 64 to 1 layer is padded to four filters with zero weights.

### Cycle count

With streams that never stall, one 3x3 layer takes:

```
weights:  F*K*9 + F + F*K       (one value per cycle; F filters, K kept)
first:    2 * cols*cin/4        (rows 0 and 1 loaded before computing starts)
per row:  1 + (F/4)*K*T + 128 + 1 + cols*(F/4)      (T = 9, or 1 in 1x1 mode)
finish:   4
```

At the default size, the first layer on a 368 x 128 frame takes 7,943,720
cycles. That layer has 128 input channels, 98 kept kernels and 84 filters.
At 100 MHz this is 79.4 ms, or 87.9 GOP/s counting two operations per MAC
of the pruned layer.

These figures come from the cycle-accurate simulation, not from a board.
About 87 % of each row is array compute. The rest is the 128-cycle drain and
the 2,688-cycle output of the row, which is not overlapped with the next
row's compute.

## The dynamic-routing engine

### The routing loop

The 64 channels of a pixel are read row-major as 8 capsules `u[i]` of
8 values. The channel index is `8*i + element`. For each pixel the loop is:

```
b = 0, c = softmax(b) = 1/8
repeat num_iter times:
    if not the first pass:  c = softmax(b)      over the 8 capsules
    s[i] = c[i] * u[i]
    s[i] = squash(s[i]) = s[i] * |s[i]| / (1 + |s[i]|^2)
    b[i] += u[i] . s[i]
output s
```

The source gives this loop only as shapes: an 8 x 8 input, 8 logits per
pixel and an 8 x 8 output. Two readings are this design's own:

- capsule `i` is weighted by its own coupling coefficient;
- the softmax is taken across the pixel's 8 capsules.

### Datapath and timing

Two pixels are routed side by side. Each pixel has:

- 8 MAC lanes, the same `mac_pe` as the array, one per capsule. They do the
  weighting, the squared norm and the agreement dot product in 8 cycles each.
- 8 `squash_exp_unit` instances. They do the exponentials, square roots and
  divisions for all capsules at once.

Per pair of pixels the engine spends:

- 32 input beats;
- per iteration, 104 cycles;
- for each softmax after the first pass, 53 more cycles;
- 32 output beats.

### The non-linear unit

`squash_exp_unit` provides three operations:

- **exp.** `exp(x)` is the degree-5 Taylor polynomial evaluated in Horner
  form, five multiplies and five adds. Its coefficients are 1/120, 1/24, 1/6,
  1/2, 1, 1 in Q0.16. The result is clamped to at least one LSB, so the
  softmax never divides by zero. Accuracy is good for the small logits
  routing produces, above about −3.
- **sqrt.** A 16-step bit-serial integer square root of a Q16.16 value,
  returned in Q8.8.
- **divide.** A 48-step restoring divider with saturation. Division by zero
  returns the largest positive value.

## Running the network

A frame runs as a sequence of layers:

1. conv1 (3x3, ReLU);
2. conv2 (3x3, ReLU);
3. then for each of I and Q:
   1. capsule conv (3x3);
   2. routing;
   3. dense 64 to 64 (1x1, ReLU);
   4. dense 64 to 1 (1x1, padded to 4 filters).

The host keeps intermediate feature maps in its own memory between layers.

For each layer the host:

1. writes `cfg` and pulses `start`;
2. sends the weight stream (convolution only);
3. sends the input feature map and collects the output;
4. waits for `done`. `layers_done` counts finished layers.

A `start` while `busy` is ignored.

## Sizes

The defaults are the sizes of the pruned first layer. That is the largest
layer, and it fits exactly:

| Resource | Size |
|---|---|
| Columns per row | 128 |
| Input channels | 128 |
| Kept kernels per filter | 98 |
| Filters | 84 |
| Weight values per bank | 21 x 98 x 9 = 18,522 |
| Index entries per bank | 2,058 |
| Output buffer | 4 x 21 x 128 values |

Rows are streamed, so image height is limited only by the 10-bit `num_rows`
field. The unpruned network (128 x 128 kernels per layer) does not fit. That
is intended: the on-chip store holds the pruned weights only.

## Where this design departs from or adds to the source description

- **Routing has its own MAC lanes.** The source draws one PE array shared by
  the convolution and routing modules. Here each engine has its own PEs,
  which keeps the two controllers independent.
- **No output/compute overlap.** Streaming an output row out is not
  overlapped with the next row's computation. Input prefetch is overlapped.
- **Weights before the image.** The two input streams are separate ports, but
  within a layer the engine takes the whole weight stream before the first
  image row. Loading the first rows during the weight load is not done.
- **Accumulators live in the PEs.** Partial sums stay in each PE instead of
  being written back to an output memory after every pass. The result is the
  same.
- **Dense layers on the convolution engine.** They run there in 1x1 mode. The
  final 64 to 1 layer needs three zero pad filters. Channel and filter counts
  must be multiples of 4.
- **Square root.** The sqrt is a bit-serial circuit, not a vendor library
  function.
- **Own choices where the source is silent.** The divider, the exponential
  clamp, the Q8.8 split, the stream word order, the descriptor layout, the
  reset (asynchronous, active low, control registers only) and the routing
  iteration count are all this design's choices. The tests use
  `num_iter = 3`.
- **Softmax series length.** The text mentions "the first five" Taylor terms
  while the drawing has six coefficients and five multiply-add stages. The
  five-stage, six-coefficient form is used.
- **Bus width.** A 64-byte beat is mentioned next to "4 values per beat" on a
  16-bit bus. Four 16-bit values (64 bits) per beat are used.

## Verification

Each module has a self-checking testbench in `tb/`. All testbenches print
`TB_RESULT checks=N failures=M` and stop on a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_mac_pe` | random products and sums, weight pass-through |
| `tb_pe_array` | a small array against a reference convolution, including when each sum finishes |
| `tb_index_control` | banked writes and reads |
| `tb_squash_exp_unit` | exp against the same polynomial computed independently; sqrt and divide exactly; each latency |
| `tb_conv_module` | three small layers (3x3 with ReLU, 3x3 with stalls, 1x1) against a software model, bit for bit, with cycle counts |
| `tb_dynamic_routing` | bit-exact against a model of the fixed-point loop, within 0.1 of a real-number model, and the cycle formula |
| `tb_layer_controller` | start/ignore/done sequencing and stream steering |
| `tb_capsbeam_accel` | a complete small frame through all ten layers, counting each mechanism (see below) |
| `tb_capsbeam_full` | the first layer at full size (368 x 128 x 128, 98 kept, 84 filters) with inputs generated from a hash; every output and the total cycle count checked |

The mechanisms counted by `tb_capsbeam_accel` are:

- 3x3 and 1x1 layers;
- routing layers;
- padding rows;
- pruned-kernel lookups;
- ReLU clamps;
- softmax passes;
- output stalls;
- input gaps.

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/capsbeam_pkg.sv rtl/*.sv \
          tb/tb_capsbeam_accel.sv --top-module tb_capsbeam_accel -o sim
./obj_dir/sim
```

`tb_capsbeam_full` uses the same command with its own top. It runs for
about a minute.
