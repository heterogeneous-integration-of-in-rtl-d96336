# TPU-IMAC: a systolic array with an in-memory analog back end for FC layers

A CNN spends most of its arithmetic in convolutional layers and most of its weights
in its fully connected (FC) layers. A systolic array (the core of a TPU) is good at
the first and poor at the second: FC weights are used once per inference, so the
array spends its time streaming weights. This design pairs an output-stationary
systolic array for the convolutions with an in-memory analog computing (IMAC) unit
for the FC layers. The IMAC stores the FC weights as ternary conductance pairs in
memristive crossbars and computes a whole FC layer, matrix-vector product plus
sigmoid, in one clock.

The key link is cheap: in an output-stationary array every PE ends the last
convolution holding one output value. Each PE's sign bit, inverted, is one binary
input of the IMAC (value >= 0 gives 1, negative gives 0). The FC part of the network
is trained for inputs in {-1, +1}, so this one-bit transfer needs no DAC, no
quantiser and no trip through memory. With a 32 x 32 array the IMAC has 1024
inputs, and the network is shaped so that the last convolution produces exactly
1024 values.

The SystemVerilog here implements the digital part as synthesizable RTL and the
analog part (crossbars, differential amplifiers, neurons, switch blocks, ADC) as
behavioural models with fixed-point "voltages".

## Block diagram

```
            +------------------------------ tpu_imac_top ------------------------------+
 LPDDR <--->| main_controller <-- scheduler (layer table)     dataflow_generator       |
 (external) |   |  enables everything                         (LPDDR address traces)   |
            |   v                                                                      |
            | weight SRAM (2 banks) --> +-------------------+                          |
            | IFMap SRAM  (2 banks) --> | 32x32 OS systolic | --drain--> OFMap SRAM    |
            |                           |  array, FP32 PEs  |           (2 banks)      |
            |                           +-------------------+              |           |
            |                              | 1024 sign bits                v           |
            |                      sign_bridge (inverter + tri-state)  activation      |
            |                              v                           (ReLU) -> LPDDR |
            |             imac: switch block -> subarray 0 -> switch -> subarray 1     |
            |                              -> output switch -> ADC -> LPDDR           |
            +--------------------------------------------------------------------------+
```

| File | Block |
|---|---|
| `rtl/tpu_imac_pkg.sv` | shared types, FP32 arithmetic, sigmoid curve |
| `rtl/pe.sv`, `rtl/systolic_array.sv` | processing element and the N x N array |
| `rtl/dbuf_sram_in.sv` | double-buffered weight SRAM and IFMap SRAM |
| `rtl/dbuf_sram_out.sv` | double-buffered OFMap SRAM |
| `rtl/activation_unit.sv` | ReLU on the write-back path |
| `rtl/sign_bridge.sv` | PE sign bits to IMAC inputs |
| `rtl/imac_subarray.sv`, `rtl/sigmoid_neuron.sv`, `rtl/imac_switch_box.sv`, `rtl/imac.sv` | IMAC behavioural models |
| `rtl/adc.sv` | ADC behavioural model |
| `rtl/scheduler.sv`, `rtl/dataflow_generator.sv`, `rtl/main_controller.sv` | control |
| `rtl/tpu_imac_top.sv` | the whole accelerator |

## How a convolution runs on the array

A convolution becomes a matrix product: `OFMap[f][p] = sum_t W[f][t] * X[t][p]`,
where `f` is the filter (output channel), `p = (oy, ox)` the output pixel and
`t = (r, s, c)` the position in the filter window, `K = R*S*C` positions in all.
PE(i, j) computes output `(f = i, p = j)` of one 32 x 32 tile. Row `i` of weights
enters from the left, column `j` of IFMap values from the top, and each PE passes
both on to its right and lower neighbour one clock later.

The SRAMs deliver one step `t` of all 32 lanes per clock. The array delays lane `k`
by `k` clocks itself, so `W[i][t]` and `X[t][j]` meet in PE(i, j) at clock `t + i + j`.
After the last of the `K` steps is presented, the last PE finishes `2N - 1` clocks
later (63 for N = 32).

Layers larger than one tile are cut into folds: filter folds of 32 filters, and
pixel folds of 32 pixels, with pixel folds outermost. For each tile the controller:

1. plays the weight trace, then the IFMap trace, from the dataflow generator. Each
   trace item is one LPDDR read into one SRAM word. Items outside the layer (filter
   `>= F` or pixel `>= P`) write 0.0 and read nothing.
2. swaps the banks of both input SRAMs and clears the accumulators.
3. streams `K` words into the array and waits until the array is idle.
4. drains the array: for 32 clocks every column shifts down one row, and the bottom
   row is written into the OFMap SRAM. Then it swaps the OFMap SRAM banks.
5. plays the OFMap write trace. Each word is read from the OFMap SRAM, passed
   through the activation unit (ReLU if the layer asks for it) and written to LPDDR.
   Items outside the layer are skipped.

Layouts in LPDDR (32-bit words): filters are stored `[f][r][s][c]`, feature maps are
stored channel-last (`[y][x][c]`), and the IFMap must already be padded. The
addresses are:

- weight `(f, t)`: `wbase + f*K + t`
- IFMap: `ibase + ((oy*stride + r)*IW + ox*stride + s)*C + c`
- OFMap: `obase + p*F + f`

The generator tracks `(oy, ox)` with counters, so it needs no divider on the trace
path.

### Arithmetic

Each PE contains an IEEE-754 single-precision multiplier and adder (the functions
`fp32_mul` and `fp32_add` in the package). The product is rounded before it is
added. Both steps round to nearest, ties to even. Subnormal inputs and results are
treated as zero. Infinities and NaNs propagate. Accumulation runs in `t` order, so a
software reference that rounds the same way and adds in the same order matches bit
for bit. The testbenches use such a reference.

## How the FC layers run on the IMAC

The last convolution before the FC part is marked `keep` in the layer table. It must
fit in one tile: at most 32 filters and at most 32 pixels. It is computed but not
drained, so its OFMaps stay in the PEs. The next table entry is an FC group of
`nfc` layers. For that group the controller:

1. raises the tri-state enable of the sign bridge for `nfc` clocks. IMAC line
   `j*32 + i` carries `NOT sign(PE(i, j))`, which is the channel-last flatten order.
2. runs the IMAC for the same `nfc` clocks. Subarray `k` settles one clock after
   subarray `k-1`, so an FC group of `L` layers takes `L` clocks. `fc_cycles`
   reports this count.
3. starts the ADC, then writes one code per LPDDR word for the `nfilt` outputs
   named in the layer entry.

There is no transfer cycle between the array and the IMAC: the sign bits are wired.

### The analog model

The crossbar is modelled as it works physically:

- A ternary weight is a pair of devices, positive and negative, each either
  conducting (1) or not (0). (1,0) is +1, (0,1) is -1 and (0,0) is 0.
- Each output row has a differential amplifier. It forms
  `sum_i (G+ - G-) * V_i`, scaled by `2^-AMP_SHIFT`.
- A sigmoid neuron follows each amplifier.

Voltages are signed fixed-point numbers with 8 fraction bits, so 1.0 is 256.
Inputs from the array are +1.0 for logic 1 and -1.0 for logic 0. Neuron outputs
lie in [0, 1].

The neuron's curve is the piecewise-linear PLAN approximation of the logistic
function:

| `abs(x)` | curve |
|---|---|
| below 1 | `x/4 + 1/2` |
| 1 to 2.375 | `x/8 + 5/8` |
| 2.375 to 5 | `x/32 + 27/32` |
| 5 or more | 1 |

For negative `x` the output is `1 - y(abs(x))`. The curve stays within 0.02 of the
logistic. The real circuit is a resistor divider in front of an inverter, and its
exact curve depends on the devices.

Each switch block is a bus multiplexer with a configuration register. Switch block
`k` feeds subarray `k` from either the PE sign bits or any subarray's outputs. One
more switch block chooses which subarray the ADC sees. The usual configuration is
PEs → subarray 0 → subarray 1 → ADC.

The ADC samples all 1024 neuron outputs at once and returns
`floor(v * 256)`, saturated to 8 bits, one clock later.

Weights are written during a configuration phase, before inference. The port writes
one neuron row of 1024 ternary values per clock.

## Control

- **Scheduler.** The scheduler holds a table of up to 32 layer descriptors
  (`layer_desc_t`):
  - the kind: CONV, FC or END;
  - the IFMap and filter shapes, stride, filter count and OFMap shape;
  - the `relu` and `keep` flags;
  - `nfc`;
  - the base addresses in LPDDR.

  The host writes the table, then pulses `start`. The scheduler hands the layers over
  one at a time with a `req`/`layer_done` handshake. It stops at an END entry, which
  pulses `net_done`.
- **Dataflow generator.** It turns a command (weight tile, IFMap tile, OFMap tile,
  ADC codes, next pixel fold) into a stream of `{lane, sram_addr, dram_addr, zero}`
  items with valid/ready.
- **Main controller.** It runs the sequences above. It makes one LPDDR access at a
  time: `mem_req` stays high until the one-clock `mem_ack`.

## Parameters (top level)

| Parameter | Default | Meaning |
|---|---|---|
| `N` | 32 | array is N x N; the IMAC has N*N inputs |
| `DEPTH` | 4608 | words per lane per bank in the weight and IFMap SRAMs (largest K, 3x3x512) |
| `NSUB` | 2 | IMAC subarrays (FC layers per group), each N*N x N*N |
| `AMP_SHIFT` | 0 | differential amplifier gain 2^-AMP_SHIFT |
| `ADC_BITS` | 8 | ADC resolution |
| `MAX_LAYERS` | 32 | scheduler table depth |

Only `N = 32` and the 1024 IMAC inputs come from the architecture description. The
other defaults are choices of this implementation:

- The SRAM depth fits the largest filter window of VGG-9 and ResNet-18 (3x3x512).
- Two 1024 x 1024 subarrays fit the 1024-1024-10 and 1024-1024-100 FC parts. These
  sizes follow from the ternary-weight storage reported for the evaluated CIFAR
  networks: for example, (1024·1024 + 1024·10) weights × 2 bits = 0.265 MB.

## What is not here, and where the design departs from the architecture

- **Double buffering.** The SRAMs have two banks and swap them every tile. The
  controller does not yet fill the next tile's banks while the current tile
  computes, so load, compute and write-back run one after another. The banks are in
  place for that overlap; the schedule is not.
- **LPDDR.** LPDDR is external. The top has a simple 32-bit word request/acknowledge
  port. `tb/lpddr_model.sv` is a behavioural stand-in with a fixed latency.
- **Other layer types.** Normalization, pooling, residual additions and depthwise
  convolutions are not executed. MobileNet-style depthwise layers would need a
  grouped trace in the dataflow generator.
- **The `keep` layer.** It must fit a single 32 x 32 tile.
- **IMAC and ADC.** These are models of analog and mixed-signal parts, not circuits:
  - device variation, noise and wire resistance are absent;
  - a high-resistance device is an open circuit;
  - the IMAC drawing's mesh of subarrays is reduced to a chain of whole-bus switches.
- **FP32 subnormals.** They are flushed to zero.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. `tb/tb_fp_pkg.sv` holds the
double-precision FP32 reference. With plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/tpu_imac_pkg.sv tb/tb_fp_pkg.sv rtl/*.sv tb/lpddr_model.sv tb/tb_pe.sv \
    --top-module tb_pe
./obj_dir/Vtb_pe
```

Replace `tb_pe` with any other testbench. Verilator warns about the files it does
not use.

`tb_tpu_imac_top` runs a small CNN end to end at `N = 8` (a 64-input IMAC):

- conv1 is 2 x 2 partial tiles with ReLU;
- conv2 is one tile, kept in the PEs;
- then two FC layers and the ADC.

It checks every output against a reference computed in the testbench. It also
counts that each mechanism occurs: bank swaps, zero fill, skipped writes, ReLU,
the tri-state enable, one clock per FC layer, pixel-fold advance, and no drain for
the kept layer.

This 8 x 8 run is the largest end-to-end simulation done. At the default size
(1024 FP32 PEs and two 1024 x 1024 crossbar models) the C++ that Verilator
generates takes too long to compile for a quick run. The blocks themselves are
tested at small sizes, with the same code that is used at full size.
