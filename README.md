# SF-MMCN: a server-flow, multi-mode CNN accelerator in SystemVerilog

Residual networks and the U-net blocks of diffusion models have a parallel
branch next to their main chain of convolutions: an identity shortcut, a 1x1
shortcut convolution or a small dense layer for the time step. Most CNN
accelerators run that branch as one more layer, in series, and pay for it in
cycles and memory traffic. SF-MMCN (server-flow multi-mode CNN unit) folds it
into the main convolution instead. Each core has nine processing elements
(PEs). Eight of them (PE_1..PE_8) compute eight outputs of the main
convolution. The ninth, PE_9, is the *server*. While the eight are still
accumulating, it prepares the parallel branch's value for each of the eight
outputs and writes those values into per-lane registers one per cycle. Each
lane then adds its value to its own MAC result in the cycle the result
appears. So a residual block costs no cycles beyond those of its main
convolution. When a network has no parallel branch, PE_9 sits idle.

This RTL implements the accelerator with eight such cores (72 PEs), 16-bit
fixed-point arithmetic, on-chip input, weight and output buffers, a layer
sequencer and a 32-bit host bus.

## Contents

| file | what it is |
|---|---|
| `rtl/sfmmcn_pkg.sv` | widths, mode codes, layer descriptor and buffer-word types, `sat16` |
| `rtl/zero_gate.sv` | turns the multiplier off for a zero input feature |
| `rtl/sf_pe.sv` | PE: zero gate, 16x16 multiplier, accumulator and tap counter |
| `rtl/rc_lane.sv` | 32-bit R_c register, residual adder and residual/normal MUX of one lane |
| `rtl/pooling_unit.sv` | two 2x2 max-pools over the eight lanes |
| `rtl/activation_unit.sv` | ReLU with an enable |
| `rtl/sf_mmcn_core.sv` | one core: PE_1..PE_8, PE_9, eight R_c lanes, pooling, activation, post adder |
| `rtl/input_buffer.sv`, `weight_buffer.sv`, `output_buffer.sv` | on-chip memories, synchronous read |
| `rtl/top_ctrl.sv` | TOP CTRL: runs one layer from the buffers through the cores |
| `rtl/io_interface.sv` | host bus: layer registers, start/status, buffer load and readback |
| `rtl/sfmmcn_top.sv` | the accelerator |
| `tb/tb_<block>.sv` | one self-checking testbench per block, `tb_sfmmcn_top` end to end |
| `tb/tb_workloads.sv` | ResNet-18 and U-net block patterns chained through the whole accelerator |

## Number format and the PE

Features, weights, addends and outputs are 16-bit two's complement. The
default format is Q8.8 (`FRAC_W = 8`). A PE multiplies 16x16 bits into a
40-bit accumulator (`ACC_W`). At the last tap of an output, it shifts the sum
right by `FRAC_W` (rounding toward minus infinity) and saturates it to 16 bits.
Every later add (residual, post adder) also saturates.

A PE has its own tap counter (`TAP_W = 16` bits, so up to 65535 taps). The
layer gives the number of taps per output (`taps` = 9 x input channels for a
3x3 convolution, the input length for a dense layer). At the first tap of
each output, the counter makes the accumulator load the product instead of
adding it. So outputs follow each other with no gap or drain cycle. With the
first load in cycle 1, the result of a 3x3 convolution is valid in cycle 10.
The next output is valid in cycle 19, and so on: 9 cycles per convolution.
Results leave the PE through a register that is valid for one cycle.

The zero gate looks at the input feature. When the feature is zero, it forces
both multiplier operands to zero, which keeps the multiplier's inputs from
toggling, and the accumulator skips that tap. A zero feature contributes
nothing to the sum, so results are exact.

## The core and the server PE

All eight lanes of a core see the same weight in a given cycle and different
input features. So PE_1..PE_8 compute the same output channel at eight
positions. Lane k covers the position at row `(k%4)/2`, column
`2*(k/4) + k%2` of a 2x4 tile of outputs. Then lanes 0..3 and lanes 4..7 each
form a 2x2 window, which the pooling unit uses. The eight cores get the same
input word and their own weights, so they compute eight output channels at
once. One output word is 8 cores x 8 lanes x 16 bits.

PE_9 has three modes (`sf_mode`):

* **SF_OFF**: PE_9 is idle. Each lane's output is its MAC result.
* **SF_PASS** (identity shortcut): during the first eight taps of an output,
  PE_9 takes one value per cycle from its input field and writes it into
  R_c1..R_c8 in turn. That value is the previous layer's output at lane k's
  position, for this core's channel. Each lane adds its R_c value to its MAC
  result.
* **SF_CONV** (shortcut convolution, or any short dot product such as
  U-net's time-step dense layer): PE_9 runs as a normal PE with its own
  weight `w9` and `res_taps` taps per result. It produces eight results in
  turn, R_c1 first. The lanes add them as in SF_PASS. To keep up with the
  lanes, PE_9 must finish its eighth result at least one cycle before the
  lanes finish: `8 * res_taps < taps`. A 1x1 shortcut over the same input
  channels has `res_taps = Cin` and `taps = 9 Cin`, which always meets this.

The "which value reaches R_c" choice is the *Mode select 1* MUX. The "add the
residual or not" choice in each lane is *Mode select 2*. Either way, the
residual adds no cycles.

Each core reads its own 16-bit PE_9 field of the input word (`CORE_ID`),
because an identity shortcut differs for every output channel. For a
shortcut convolution, the host writes the same feature into all eight
fields.

**R_c registers and data reuse.** Each R_c is 32 bits. The upper half holds
the residual from PE_9. The lower half holds one lane input feature for
reuse. An input word carries two 8-bit masks. `reuse_cap[k]` stores lane k's
feature from this word. `reuse_use[k]` makes lane k take its feature from the
stored copy instead of the word. This lets a feature that appears again in a
later output skip the buffer.

**Small-map (split) mode.** With `split` set, lanes 4..7 use weight B instead
of weight A. So each core computes two output channels on four positions.
This is for maps too small to fill eight lanes, such as a 2x2 output. With
SF_CONV, PE_9's per-tap weight can switch between the two channels' shortcut
weights: results 1..4 then belong to channel N, and results 5..8 to channel
N+1.

**After the lanes**, the mode MUX passes the lane values on:

| `mode` | code | path |
|---|---|---|
| convolution | 1 | lanes -> activation -> post adder |
| max pooling | 2 | PEs bypassed. The word's eight features are registered once, then go to pooling -> activation -> post adder. One output per input word. |
| convolution + max pooling | 3 | lanes -> pooling -> activation -> post adder |
| dense | 4 | like convolution, with `taps` = input length and the batch in the lanes |

Pooling takes the maximum of lanes 0..3 into lane 0 and the maximum of lanes
4..7 into lane 1. The other lanes output zero. The activation is ReLU when
`act_en` is set. With `add_en` set, the post adder adds a per-core addend (a
bias, or the final add of a U-net block). The addend is taken from the weight
word of each output's first tap.

## Buffers, TOP CTRL and the host bus

The host loads one layer's data and then starts it:

* **Input buffer**: 1024 words, one per cycle of computation. A word holds
  the eight lane features, eight PE_9 features (one per core) and the two
  reuse masks.
* **Weight buffer**: 1024 words, one per tap. For each core, a word holds
  weight A, weight B, the PE_9 weight and the addend.
* **Output buffer**: 256 words, one per output tile.

All three have a synchronous one-cycle read.

**TOP CTRL** latches the layer descriptor at `start`. For n_ops outputs, it
streams `taps` consecutive input words from `in_base`. For tap t it reads
weight word `w_base + t`, so one set of weights serves every tile of the
layer. It drives the cores in lockstep, with a one-cycle clear at the layer
start. Each finished output word goes to the output buffer at
`out_base + k`. After the last word, `done_o` pulses. A layer of n_ops
outputs takes `n_ops * taps` cycles of streaming plus a few cycles of
latency (`n_ops` cycles in pooling mode).

The **host bus** (`host_we_i`, `host_re_i`, 24-bit address, 32-bit data) has
four regions, selected by address bits [23:20]. Bits [19:5] are the register
or word index and bits [4:0] the 32-bit chunk.

| region | contents |
|---|---|
| 0 | registers: 0 start (bit 0), 1 control `{add_en[10], act_en[9], split[8], sf_mode[5:4], mode[2:0]}`, 2 taps, 3 res_taps, 4 n_ops, 5 in_base, 6 w_base, 7 out_base, 8 status `{busy[1], done[0]}` (read only; done stays set until the next start) |
| 1 | input words: 9 chunks each. The word is written when chunk 8 arrives. |
| 2 | weight words: 16 chunks each. The word is written when chunk 15 arrives. |
| 3 | output words: 32 chunks each, read only |

Read data arrives with `host_rvalid_o`, two cycles after `host_re_i`.

## Mapping layers

* **3x3 convolution** (Cin input channels, 8 output channels per pass): one
  input word per tap (`c*9 + dy*3 + dx`) per 2x4 tile, with
  `taps = 9*Cin`. The weight word for tap t holds each core's weight.
  Outputs beyond 8 channels need another pass with other weights.
* **Residual block, identity shortcut**: as above with SF_PASS. In the first
  eight input words of each tile, core j's PE_9 field carries the shortcut
  value for lane t's position and channel j.
* **Residual block, 1x1 shortcut convolution**: SF_CONV with
  `res_taps = Cr`. In input word t < 8*Cr, the PE_9 field carries channel
  `t % Cr` at lane `t / Cr`'s position. The weight word carries `w9`.
* **Dense**: the input vector runs along the taps. The lanes hold up to eight
  vectors of a batch, and each core computes one output neuron.

`tb/tb_sfmmcn_top.sv` builds each of these mappings from tensors and checks
the results against a direct computation, so it also serves as a worked
example.

## Where this design departs from the source description, and what it leaves out

* **Eight cores.** The description says in one place that there are four
  cores and in another that there are eight. The architecture drawing and the
  PE count (72 = 8 x 9) show eight, so eight are built (`N_CORES`).
* **Mode field width.** The mode field is drawn as two bits, but the printed
  codes run to 4 (dense), so it is three bits wide.
* **Not built: data exchange between cores for dense layers.** The exchange
  through the PE registers is described only as a possibility, with no path
  or timing. Here each core computes its own output neurons from the shared
  input stream.
* **Not built: shifter-based address generation for shortcut inputs.** The
  host lays out the shortcut data in the input words instead.
* **Not built: off-chip memory.** The host bus on the top level's ports
  stands in for it.
* **One shared output buffer.** The separate per-core output buffers are
  merged into it.
* **This design's own choices**, where the description is silent:
  * the fixed-point split (Q8.8), rounding and saturation
  * buffer sizes
  * the pooling window (2x2 over lanes 0..3 and 4..7, from the drawn start
    positions of the eight PEs)
  * ReLU as the only activation
  * the post adder's operand
  * the PE_9 write order R_c1..R_c8, restarting at every layer
  * the per-core PE_9 input field
  * the reuse masks
  * the whole host bus and register map
* **Capacity.** With the default buffers, one pass holds at most
  1024 / taps tiles and at most 1024 taps.
  * The first VGG-16 layer (27 taps) and ResNet-18 layers up to 64 channels
    (576 taps) fit.
  * 3x3 layers with more than 113 input channels and VGG's first dense layer
    (25088 inputs) do not. They would need their input channels split across
    passes, with the partial sums added off chip. That is not provided:
    outputs are saturated 16-bit values.

## Simulating

Every testbench is self-checking. It ends with a
`TB_RESULT checks=<n> failures=<m>` line, and has a cycle watchdog. For
example, the end-to-end test at full size:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv \
  rtl/sfmmcn_pkg.sv tb/tb_sfmmcn_top.sv --top-module tb_sfmmcn_top -Mdir obj_top
./obj_top/Vtb_sfmmcn_top
```

Replace `tb_sfmmcn_top` with any other `tb_<block>` to test one block.
`tb_sfmmcn_top` runs seven layers through the host bus, in this order:

1. convolution with zeros, ReLU and a bias
2. identity residual fed from layer 1's read-back outputs
3. residual block with a 1x1 convolution shortcut
4. convolution + pooling
5. pooling
6. dense with data reuse
7. split mode

It checks:

* every output word
* that the first output of a layer comes `taps` cycles after the first tap
  reaches the cores
* that later outputs follow every `taps` cycles

It counts zero-gated multiplies, residual writes and adds, reused features,
pooled outputs, split layers, mode switches, ReLU clamps, post adds and
back-to-back outputs, and fails if any of them never happened. It takes
about 10 seconds to build and well under a second to run.
`tb_sf_mmcn_core` tests a core alone: it drives the core directly, with
random data, in every mode combination.

`tb_workloads` chains real block patterns through the host bus, each layer
fed from the previous layer's read-back output, with 8 channels on a 4x8 map
and zero padding:

* a ResNet-18 basic block (two 3x3 convolutions with an identity shortcut)
* the same block with a 1x1 projection shortcut computed on PE_9
* a U-net diffusion block. Its first convolution gets the time-step dense
  layer from PE_9. The second convolution has no ReLU, and the block's input
  is added back as the final add.

To change the size, edit the constants in `sfmmcn_pkg.sv` (widths, lanes,
cores, buffer address widths). `sfmmcn_top` also takes `N_CORE` to build
fewer cores than the package's `N_CORES`.
