# Row-based accelerator for radix-encoded spiking neural networks

Most spiking neural networks use rate encoding. A value then becomes a spike frequency,
and high accuracy needs spike trains hundreds of steps long. Radix encoding uses a short
train instead: T steps, usually 3 to 6. The spike at step t stands for bit T-1-t of the
activation, so the first spike is the most significant bit. A T-step train then carries
exactly one T-bit unsigned integer. A network layer can still be computed with adders
only: each time step is a binary (spike or no spike) pass, and the sum of earlier steps
is shifted left by one bit before the next step is added.

This RTL implements an accelerator for such networks. It is organised around three ideas:

* **Row-based convolution.** A convolution unit handles a whole feature-map row at once.
  It has a 2D array of adders with one row per kernel row and one column per output
  value. Its partial sums move down the array, one adder row per input row.
* **Accumulation over channels and time steps next to the array.** A per-column output
  stage adds the array result to a stored partial sum. At the first input channel of a
  new time step it adds the stored sum shifted left by one bit (the radix weight).
* **Ping-pong activation buffers.** Each layer reads one bank and writes the other. There
  is one such pair for feature maps (2D) and one for fully connected layers (1D).

The default build is sized for LeNet-5 on MNIST
(32x32x1 - 6C5 - P2 - 16C5 - P2 - 120C5 - 120 - 84 - 10):

* four 5x5 convolution units with 30 adder columns;
* a 2x2 pooling unit with 14 columns;
* a 16-wide linear unit;
* 3-bit weights and up to 6 time steps.

## Block diagram

```
            host / DRAM transfer agent (outside)
               |  k_*  w_*  param_req/param_done  img_*  cfg_*
   +-----------v-----------------------------------------------------+
   |  controller (layer table, loop sequencing)                       |
   |                                                                  |
   |  kernel_bram --N kernels--> conv_unit x N --+                    |
   |                              ^ spikes       | rows               |
   |                              |              v                    |
   |                 act2d_buffer (ping | pong) <--- pool_unit        |
   |                              | flatten                           |
   |                              v                                   |
   |  weight_bram --P weights--> linear_unit <--> act1d_buffer        |
   |                                              (ping | pong)       |
   +------------------------------------------------------------------+
                     result_scores (last layer, full precision)
```

| File | Role |
|---|---|
| `rtl/snn_pkg.sv` | sizes, enums, the layer descriptor `layer_t`, `requant()` |
| `rtl/conv_unit.sv` | one convolution unit: input shift register, sequencing, array and output stage |
| `rtl/conv_adder_array.sv` | KR x X adder array with rotating kernel-row registers |
| `rtl/conv_output_logic.sv` | accumulation over channels and steps, partial-sum memory, requantization |
| `rtl/pool_unit.sv` | row-based average pooling |
| `rtl/linear_unit.sv` | row of P adders for fully connected layers |
| `rtl/kernel_bram.sv`, `rtl/weight_bram.sv` | parameter memories |
| `rtl/act2d_buffer.sv`, `rtl/act1d_buffer.sv` | ping-pong activation buffers |
| `rtl/controller.sv` | runs the layer table |
| `rtl/snn_accel.sv` | top level |

## Number formats

* **Activations** are stored as T_MAX = 6-bit unsigned integers, one per neuron. The
  spike of time step t (t = 0 .. T-1) is bit `T-1-t`. T is set at run time (`num_steps`).
* **Weights and kernel values** are 3-bit two's complement (-4..3).
* **Partial sums** are 24-bit two's complement and are never rounded while a layer runs.
* **Requantization** turns a finished sum back into an activation. It applies ReLU, then
  an arithmetic right shift by the layer's `rq_shift`, then saturates at 2^T - 1
  (`snn_pkg::requant`). The shift stands in for whatever scaling an offline conversion
  flow would produce. The last layer is not requantized: its 24-bit sums are the output.

Because a T-step radix train is worth exactly its integer, the result of a layer equals
an ordinary integer convolution or matrix product of the stored activations, followed by
`requant`. The testbenches use this as their reference model.

## The convolution unit

The hardest part to follow is the convolution unit. It works on one binary row of one
input channel at one time step. The following describes the default 5x5 kernel, stride 1
and X = 30 columns.

**Input logic.** When a row arrives (`row_valid`), its spikes are loaded into a shift
register of `(X-1)*STRIDE + KC` positions; positions past the 32-lane row are zero.
Adder column x is wired to position `x*STRIDE`. The register then shifts by one position
per cycle for KC cycles. In cycle k, column x therefore sees input column
`x*STRIDE + k`, which is kernel column k of its window.

**Adder array.** Adder row y holds kernel row y in a KC-entry rotating register. In
cycle k, entry 0 of that register holds K(y,k). The register rotates once per cycle and
is back at its start after the row. Each adder adds its row's current kernel value if its
column's tap has a spike, and adds zero otherwise. After the KC cycles of input row i:

* adder row 0 holds the contribution of kernel row 0 to output row i;
* adder row y holds kernel rows 0..y of output row i-y.

On the first cycle of the next input row, every adder row y > 0 takes the sum of row y-1
before adding, and row 0 starts from zero. Output row r is thus finished in the bottom
row after input row r+KR-1. Input rows 0..KR-2 produce nothing, and the sequencer says
which rows do (`out_en`). For a vertical stride above 1 the sequencer would keep only
every STRIDE-th finished row. The default build has stride 1.

**Output logic.** Each column adds the bottom-row value to the stored partial sum of the
same output row (`psum_mode`):

| mode | when | new sum |
|---|---|---|
| `PS_FIRST` | time step 0, input channel 0 | array value |
| `PS_SHIFT` | time step t > 0, input channel 0 | array value + (stored << 1) |
| `PS_ACC` | any later input channel | array value + stored |

The partial-sum memory holds one word of X sums for each output row of the output channel
being computed. In the final pass (last step, last input channel) the new sums are also
requantized into `act_out`.

**Timing of one row.**

| cycle | what happens |
|---|---|
| 0 | `row_valid`: load the shift register, read the partial sum |
| 1 .. KC | the array steps through the kernel columns |
| KC+1 | commit to the partial-sum memory (`busy` falls after this cycle) |
| KC+2 | `out_valid` and `act_out`, if this was a final-pass output row |

A new kernel (`kern_load`) may only be loaded while the unit is idle; an assertion
checks this.

## Pooling and linear units

**Pooling** uses the same row pipeline with KR = KC = 2, stride 2 and X = 14. It has no
kernel values. It adds whole 6-bit activation values, not single spikes, so one pass per
row is enough. The window sum is divided by 4 with a right shift, so this is average
pooling, rounded down. Its output is ready KC+1 cycles after the row.

**Linear unit.** Each cycle with `valid` it receives one input neuron's spike for the
current step and one weight word: P = 16 weights, one per output neuron. It adds each
weight to its accumulator if the spike is set. `clear` starts a new output group.
`shift` doubles the accumulators before the first neuron of every later time step.
Neurons stream at one per cycle.

## Memories and buffers

| Memory | Word | Depth | Addressing |
|---|---|---|---|
| `kernel_bram` | 4 kernels x 25 x 3 bit = 300 bit | 512 | `base + group*in_ch + ic`; kernel u of the word is output channel `4*group+u` |
| `weight_bram` | 16 x 3 bit = 48 bit | 1024 | `base + group*n_in + i`; lane p is output `16*group+p` |
| `act2d_buffer` (x2 banks) | 32 x 6 bit = 192 bit (one row of one channel) | 256 | `channel*rows + row` |
| `act1d_buffer` (x2 banks) | 16 x 6 bit = 96 bit | 64 | neuron n at word n/16, lane n%16; per-lane write enables |

Reads are registered: the data appears one cycle after `rd_en` and holds until the next
read. In the activation buffers, reads come from the bank given by `sel` and layer writes
go to the other bank. `swap` exchanges them at the end of each layer. The image port
(`img_*`) writes the bank that the first layer reads.

## The controller and the layer table

The host writes up to 16 `layer_t` descriptors. Each descriptor has a kind
(`L_CONV`, `L_POOL`, `L_FLAT`, `L_LIN`) and the layer's shapes: `in_ch`, `in_h`, `in_w`,
`out_ch`, `out_h`, `n_in` and `n_out`. It also holds the first parameter word
(`param_base`), `rq_shift`, and two flags:

* `ext_load`: wait for external parameters before the layer;
* `last`: this is the final layer.

A `start` pulse gives the number of layers and T. The loops are, outermost first:

* **Convolution:** output-channel group of 4 -> time step -> input channel -> input row.
  At each (group, step, channel) the four kernels are read in one word and loaded. Each
  input row is then read and its bit plane `T-1-t` is broadcast to all units. In the
  final pass the four finished rows are written back one per cycle. The units wait
  during that time. Writes for channels beyond `out_ch` are skipped.
* **Pooling:** channel -> row. A finished row is written after every odd input row.
* **Flatten:** channel -> row -> column. One neuron per cycle goes into the 1D buffer,
  neuron index `(channel*rows + row)*cols + column`.
* **Linear:** output group of 16 -> time step -> input neuron. One activation word and
  one weight word are read per cycle. The linear unit gets them one cycle later. The
  group's requantized results are written as one 1D word.

On the last layer, `result_valid` pulses once per group. At that pulse `result_scores`
holds the 24-bit sums and `result_group` holds the group index.

**External parameters.** Before a layer marked `ext_load`, the controller raises
`param_req` with `param_layer` and waits for `param_done`. Meanwhile an outside agent
(for example a DRAM transfer engine) writes that layer's kernels or weights through
`k_*` / `w_*`. The DRAM and its controller are not part of this RTL.

## Departures from the source design, and limits

* **Sequencing is only partly overlapped.** The next input row is read while the units
  work, but a convolution row still costs KC+3 = 8 cycles where the array needs KC = 5.
  Kernel loads and write-back are not hidden. LeNet-5 at T = 4 takes 104,145 cycles,
  about 521 us at 200 MHz. The source design reports 294 us for the same network, unit
  count and clock, so its sequencing overlaps more.
* **No channel sharing.** One convolution unit computes one output channel. Packing
  several narrow output channels side by side into one unit is not implemented.
* **One kernel size.** Only 5x5 units are built. Networks with 3x3 kernels, such as
  VGG-11 or the 32C3 network used for comparison, need another unit type with its own
  kernel memory and sequencing, and much larger buffers.
* **Own choices.** Average pooling, shift-based requantization, no bias, and the
  layer-table and host interface are this design's choices. The source only names
  pooling, "ReLU and requantize" and a controller.
* **Sizes set for LeNet-5.** The parameter sizes are the smallest round numbers that hold
  LeNet-5. Changing `snn_pkg` sizes the design for other networks. The descriptor field
  widths limit a row to 63 values and a layer to 1023 channels.

## Verification

Each block has a self-checking testbench in `tb/`:

| Testbench | What it checks |
|---|---|
| `tb_conv_unit` | 2-channel, 3-step convolution against integer arithmetic, and the KC+2 latency |
| `tb_pool_unit` | window averages, which rows give output, latency |
| `tb_linear_unit` | sums and requantized outputs over 4 steps, two runs |
| `tb_kernel_bram`, `tb_weight_bram` | read-back, read latency, hold |
| `tb_act2d_buffer`, `tb_act1d_buffer` | bank alternation, host port, lane enables |
| `tb_controller` | every memory address and unit control of a four-layer network, against lists built in the testbench |
| `tb_snn_accel` | LeNet-5 end to end at default parameters |

`tb_snn_accel` runs the LeNet-5 network four times, with random zero-mean weights and a
random image each time: at T = 4, then at T = 3, 5 and 6. It checks every row written to
either activation buffer, plus the 10 final scores, against a reference model. The third
convolution layer's kernels are supplied only on request, which exercises the
external-load handshake. The test also counts each mechanism and fails if one never
happens: kernel loads, shift and plain accumulation, write-back stalls, skipped unit
outputs, pooling, flatten, linear shifts, buffer swaps, the external load and saturation
in requantization. It also checks that the first fully connected layer streams exactly
one weight word per cycle (6 groups x T steps x 120 inputs), and that latency grows with
T.

Measured cycle counts, including the external kernel load (about 500 cycles):

| T | cycles | at 200 MHz |
|---|---|---|
| 3 | 78,917 | 395 us |
| 4 | 104,145 | 521 us |
| 5 | 129,373 | 647 us |
| 6 | 154,601 | 773 us |

Each extra time step adds about 25,200 cycles. Almost all the work is repeated once per
step, so latency is linear in T.

To run a testbench with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_snn_accel -y rtl \
  rtl/snn_pkg.sv tb/tb_snn_accel.sv
./obj_dir/Vtb_snn_accel
```

Each testbench ends with the line `TB_RESULT checks=<n> failures=<m>`. The four LeNet-5
runs take about two seconds of simulation.
