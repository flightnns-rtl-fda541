# FLightNN convolution engine

A FLightNN is a quantized neural network whose weights are sums of a few
signed powers of two. Multiplying an activation by one power of two is a
shift, so a weight made of `k` terms costs `k` shifts and `k-1` additions
instead of a multiplier. What sets FLightNNs apart from plain LightNNs is
that `k` is not fixed for the whole network: training picks it for each
convolutional filter, from 0 (the filter is pruned) up to 2. Filters that
need precision get two terms, the rest one or none, and the network lands
between the accuracy and the cost of the all-one-term and all-two-term
networks.

The observation that makes this cheap in hardware is linearity. A filter
whose weights are `w = t0 + t1` (each `t` a power of two per weight)
convolved with a map gives the same result as convolving the map with the
one-shift filter `t0`, convolving it with the one-shift filter `t1`, and
adding the two output maps. A FLightNN layer therefore runs on a one-shift
(LightNN-1) convolution engine plus an accumulator that adds output feature
maps. Each filter takes as many passes over the layer as it has terms, so
the run time follows the total number of terms, which is exactly what the
per-filter `k` trades against accuracy.

This repository holds synthesizable SystemVerilog for such an engine: one
convolutional layer, batched over several images, with buffers for the
input maps, weight terms, per-filter `k` values and output maps.

## Numbers

| quantity | format |
|---|---|
| activation | 8-bit signed fixed point, any scale |
| weight term | 4 bits `{sign, e}`, value `(-1)^sign * 2^-e` for `e` = 0..6; `e` = 7 is a zero term |
| weight of a filter with `k_f` terms | sum of its `k_f` terms (`k_f` in 0..2) |
| product | exact, 15-bit signed, 6 fraction bits more than the activation |
| output pixel | `ACC_W` = 32-bit signed, 6 fraction bits more than the activation |

A term code never needs a multiplier: `act * 2^-e` is computed as
`act <<< (6 - e)`, then negated if `sign` is set. Keeping 6 extra fraction
bits makes every product exact, so the engine does no rounding at all; an
output pixel is the exact sum `sum_c sum_ky sum_kx act * w` in units of
`2^-6` activation LSBs. The 4-bit term width matches the 4-bit weights of
LightNN-1 and two of them the 8-bit weights of LightNN-2. The exact split
of the four bits, the range `2^0 .. 2^-6`, and the zero code are choices
of this design: a residual can be exactly zero after the first term, and
that needs a code. Terms larger than 1 are not representable; scale the
activations instead.

Batch normalization, the Leaky ReLU and pooling that follow the
convolution in the networks are not part of the engine, and neither is a
bias (it folds into the batch normalization). The output is the raw
convolution sum.

## How a layer is computed

The controller walks this loop nest, issuing one *slice* per clock cycle:

```
for f in 0 .. C_OUT-1                 filter
  if k_f == 0: spend one idle cycle   pruned filter, nothing issued
  for j in 0 .. k_f-1                 term pass (one LightNN-1 convolution)
    for oy in 0 .. HO-1               output row
      for ox in 0 .. WO-1             output column
        for c in 0 .. C_IN-1          input channel
          slice (f, j, oy, ox, c)
```

A slice is one input channel's `K x K` window at output position
`(oy, ox)`, for all `BATCH` images at once, together with the `K x K` term
codes of filter `f`, term `j`, channel `c`. The compute unit shifts each of
the `BATCH * K * K` activations by its code, sums the `K * K` products of
each image, and accumulates over the `C_IN` channels. After the last
channel the finished neuron (one value per image) goes to the feature map
accumulator, which **writes** it if `j == 0` and **adds** it onto the value
already stored there if `j > 0`. That add is the summation of the `k_f`
one-shift output maps.

The fixed-`k` networks are special cases of the same engine: with every
`k_f` = 1 it is a LightNN-1 layer, with every `k_f` = 2 a LightNN-2 layer
at exactly twice the run time. A FLightNN mix sits in between, or below
LightNN-1 when some filters are pruned.

A pruned filter never writes its map; instead the readout port returns zero
for every filter whose `k_f` is 0. A `k_f` of 3 (above the two-term
maximum) is treated as 2.

### Run time

From the cycle in which `start` is sampled to the cycle in which `done`
pulses, a layer takes

```
cycles = 4 + sum over filters of cost_f
cost_f = k_f * HO * WO * C_IN     if k_f > 0
cost_f = 1                        if k_f = 0
```

The 4 is one cycle to leave idle and three to drain the pipeline. With the
default sizes (64 filters, 64 channels, 32 x 32 outputs) each term pass
costs 65,536 cycles, so a layer with every filter at one term takes about
4.2 M cycles, at two terms about 8.4 M, and any FLightNN mix lies in
between in proportion to its term count. Each cycle performs
`BATCH * K * K` = 36 shift-and-add operations.

### Pipeline

| stage | what happens |
|---|---|
| S0 | controller issues a slice; input window, term codes are read (synchronous reads) |
| S1 | window and codes reach the compute unit; its per-image sums are added into the channel accumulators |
| S2 | a finished neuron enters the accumulator: its old value is read |
| S3 | `old + new` (or `new` on the first pass) is written |

The only hazard is a neuron that arrives in S2 while the same address is
being written in S3. That happens only with `C_IN = 1` and a one-pixel
output map, and the accumulator forwards the written value for it. The
host read port forwards in the same way.

## Blocks

| module | role |
|---|---|
| `flightnn_pkg` | widths, the term code type `wcode_t`, the zero code |
| `pow2_shift_unit` | one activation times one term: a barrel shift and a conditional negation |
| `shift_compute_unit` | `BATCH x K*K` shift units, a sum per image, a channel accumulator per image; reused for every neuron of the layer |
| `ifmap_buffer` | `C_IN x H x W` words of `BATCH` bytes; `K*K` read ports give a whole window with zero padding |
| `weight_buffer` | one word per (filter, term, channel): `K*K` term codes |
| `k_table` | `k_f` per filter; reset makes every filter pruned |
| `conv_controller` | the loop nest above, start/busy/done |
| `fmap_accumulator` | output maps, two-stage read-modify-write that writes the first pass and adds later ones |
| `flightnn_conv_top` | wires the above and the S0/S1 pipeline register; host ports |

Every file opens with a comment giving its function, timing and which
parts are fixed by the FLightNN scheme and which are choices of this
design.

## Using the engine

All host ports are plain signals, sampled on the rising edge of `clk`;
`rst_n` is an active-low asynchronous reset. Load the engine while `busy`
is low (an assertion flags writes while it runs):

1. Input maps: for every channel `c`, row `y`, column `x`, one cycle with
   `ifm_we` = 1 and `ifm_data[b]` = pixel of image `b`.
2. Term codes: for every filter `f`, term `j` < `k_f` and channel `c`, one
   cycle with `wgt_we` = 1 and `wgt_codes[ky*K + kx]` = the code of tap
   `(ky, kx)`. Terms `j >= k_f` need not be written.
3. Term counts: `k_we` = 1 with `k_f` and `k_val`, once per filter.
4. Pulse `start` for one cycle. `busy` rises the next cycle; `done` pulses
   when the last result is stored.
5. Read results: set `ofm_f`, `ofm_y`, `ofm_x`; `ofm_data[b]` holds image
   `b`'s output one cycle later.

Weights and maps stay in the buffers, so a new run with only new `k`
values (or new maps) needs only those reloaded. Output position
`(oy, ox)` covers input rows `oy - PAD .. oy - PAD + K - 1` and likewise
for columns (stride 1).

## Parameters and sizes

| parameter | default | origin |
|---|---|---|
| `KMAX` | 2 | the two-term maximum used for all FLightNNs |
| `K` | 3 | 3 x 3 filters, as in the decomposition example of the scheme |
| `C_OUT` | 64 | filters in the largest layer of the smallest CIFAR-10 VGG network (network 1) |
| `C_IN` | 64 | assumed equal to `C_OUT` |
| `H`, `W` | 32 | CIFAR-10/SVHN image size; the map size of the largest layer is not known |
| `PAD` | 1 | same-size output, assumed |
| `BATCH` | 4 | images processed in parallel; the original FPGA work used the largest batch that fit, without stating it |
| `ACC_W` | 32 | accumulator width; a 64-channel, 2-term layer needs about 25 bits |

The networks the FLightNN work evaluates have 64, 128, 256 or 512 filters
in their largest layer. With the defaults the engine holds a 64-filter
layer (the VGG networks for CIFAR-10 and SVHN with width 64); the wider
layers need `C_OUT` (and usually `C_IN`) raised, which grows the buffers
linearly. Nothing in the RTL depends on the sizes being powers of two.
Memory at the defaults: 2 Mbit of input maps, 288 kbit of term codes,
8 Mbit of output maps.

## Where this design makes its own choices

The FLightNN scheme fixes the arithmetic: power-of-two terms applied by
shifts, a per-filter term count with 0 meaning pruned, the decomposition of
a `k`-term filter into `k` one-shift convolutions whose output maps are
added, batched inference, and one computation unit reused for every
neuron. The original evaluation built its FPGA layers with high-level
synthesis and did not publish the datapath, so the following are this
design's own:

- the term code layout, its exponent range and the zero code;
- exact products with 6 fraction bits, no rounding or saturation;
- the loop order and the one-slice-per-cycle schedule (one channel of one
  output pixel for all images per cycle);
- the buffer organisation: a window-wide input read port, one weight word
  per (filter, term, channel), output maps accumulated by
  read-modify-write;
- zero padding, stride 1, and a one-cycle cost for a pruned filter;
- the host interface, and masking pruned filters' outputs to zero on
  readout instead of clearing their maps.

An FPGA build would map the input buffer's nine read ports onto line
buffers or banked block RAM; the RTL describes them as a plain array.

## Verification

Each module has a self-checking testbench in `tb/` that compares against a
reference computed in the testbench itself and ends with a
`TB_RESULT checks=N failures=M` line:

| testbench | what it checks |
|---|---|
| `tb_pow2_shift_unit` | all 256 activations x 16 codes |
| `tb_shift_compute_unit` | 300 random neurons of 1..5 channels, 3 images, exact sums, tags, one-cycle result latency |
| `tb_ifmap_buffer` | every window of a 3-channel 4 x 5 map, including padded taps |
| `tb_weight_buffer` | random slices read back |
| `tb_k_table` | reset to pruned, both read ports |
| `tb_fmap_accumulator` | random write/add requests, back-to-back hits on one address, host reads during a write |
| `tb_conv_controller` | issue order, flags and cycle count for several `k` patterns, including all-pruned and an out-of-range `k` |
| `tb_flightnn_conv_top` | whole engine at small sizes (3 images, 3 channels, 7 filters, 4 x 5 maps): every output of two runs against a reference convolution, the cycle formula, counts of pruned, one-term and two-term filters, padded taps and zero terms, then all-`k`=1 and all-`k`=2 runs (two-term run exactly twice as long, the mix faster than it) |
| `tb_flightnn_full` | the same at the default sizes: one full layer, 262,144 output values, 4.46 M cycles |
| `tb_flightnn_workloads` | engines re-sized for the wider layers (128, 256 and 512 filters with as many input channels, 8 x 8 or 7 x 7 maps), each run once and checked in full; uses the helper `flightnn_layer_check` |

Run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/flightnn_pkg.sv tb/tb_flightnn_conv_top.sv --top-module tb_flightnn_conv_top
./obj_dir/Vtb_flightnn_conv_top
```

The full-size run takes a few seconds, the workload run under a minute
(15.7 M cycles for the 512-filter layer). The testbenches use `$urandom`
only, so they need no constraint solver.

## Limits

- One layer at a time; moving maps between layers, and the
  normalization and activation between them, is left to the host.
- The layer must fit the buffers; there is no tiling of filters or
  channels over several runs inside the engine, though the host can do it
  by loading filter groups in turn (outputs of a group are complete).
- Energy and FPGA resource figures of the original evaluation cannot be
  reproduced from RTL simulation.
