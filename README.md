# FusionAccel stream accelerator in SystemVerilog

This is RTL for the FusionAccel CNN inference accelerator, in its stream-processing form. The FPGA does the arithmetic of one piece of a layer at a time. The host PC does the rest:

- it pads the feature maps and cuts them into windows (im2col);
- it slices the weights;
- it sends each piece over USB 3.0 and reads the results back.

All arithmetic is IEEE half precision (FP16), eight lanes wide.

## Structure

```
host pipes --usb_io--> command FIFO --csb--> layer register ----+
           \--pipe_serdes--> data / weight / bias caches -------+--> engine
host pipe  <--usb_io-- result FIFO <--------------------------------+
```

| Module | Role |
|---|---|
| `fusion_accel` | Top level. Has two clock domains: `ti_clk` (USB interface, 100.8 MHz) and `clk` (engine, 100 MHz). |
| `usb_io` | Connects the host's pipe endpoints to the command FIFO, the caches and the result FIFO. Drives the ready flags. |
| `pipe_serdes` | Packs eight FP16 values, one per 32-bit pipe word, into one 128-bit cache word. Writes it at the next address. |
| `async_fifo` | Dual-clock FIFO using Gray-code pointers, with a standard (registered) read. Used for the 32x1024 command and result FIFOs, and for the small FIFOs inside the compute units. |
| `bram_sdp` | Dual-clock RAM with a one-cycle read. Data cache 128x1024, weight cache 128x8192, bias cache 128x1024. |
| `csb` | Command block. On an `op_en` edge it reads three 32-bit command words into the layer register and starts the engine. On a `restart` edge it reruns the last layer. `engine_ready` is low while a run is in progress. |
| `engine` | Reads the caches, feeds the unit selected by the layer's `op_type`, and serialises results into the result FIFO. |
| `conv_unit` | Eight multipliers, then eight per-lane accumulators (CSUM) over the kernel window, then one accumulator (FSUM) over the eight lanes. FSUM starts from the bias or from the running sum of earlier input-channel groups (a 128-entry cache). ReLU is applied at the output. |
| `maxpool_unit` | Eight comparators. Each keeps the running maximum per lane, starting from 0. |
| `avepool_unit` | Eight accumulators, then eight dividers. The divisor is the window size, converted to FP16. |
| `fp16_mul`, `fp16_add`, `fp16_cmp`, `fp16_div`, `int2fp16` | FP16 operators. Pipeline latencies are 6, 2, 2 and 6 cycles. `int2fp16` is combinational. |
| `fp16_pkg`, `fa_pkg` | FP16 functions; sizes, operation codes and the layer register layout. |

## Arithmetic

- Rounding is to nearest even.
- Subnormal inputs and results are flushed to zero.
- Overflow gives infinity. Invalid operations give the quiet NaN `7E00`.
- The adder forms the exact sum before it rounds.

## Commands

A layer command is three 32-bit words, word 0 first:

| Word | Bits | Field |
|---|---|---|
| 0 | [3:0] | `op_type`: 0 idle, 1 convolution + ReLU, 2 max-pool, 3 average-pool |
| 0 | [7:4] | stride |
| 0 | [15:8] | kernel side |
| 0 | [23:16] | `kernel_size` (number of window values) |
| 0 | [31:24] | second stride |
| 1 | [7:0] | input side |
| 1 | [15:8] | output side, i.e. output positions per run, at most 128 |
| 1 | [19:16] | padding |
| 1 | [23:20] | slot |
| 2 | [15:0] | input channels |
| 2 | [31:16] | output channels |

The engine uses only these fields: `op_type`, `kernel_size`, output side, input channels and output channels. The host applies the stride and padding when it cuts the windows.

## Cache layout for one run

Let KS be `kernel_size`, and G = ceil(input channels / 8) the number of channel groups.

- **Data cache.** Word `(g*P + p)*KS + k` holds tap k of position p for channel group g.
- **Weight cache.** For convolution, word `(n*G + g)*KS + k` holds the matching weights of output channel n.
- **Bias cache.** Word n holds the bias of output channel n in bits [15:0].

Each result is a 32-bit word with the FP16 value in bits [15:0] and zeros above.

- **Convolution:** results come in output-channel order, then position order.
- **Pooling:** each position gives eight words, lane 0 first.

A run must fit the caches:

- G·P·KS ≤ 1024 data words;
- N·G·KS ≤ 8192 weight words;
- P ≤ 128.

Layers larger than that are split by the host. For example, SqueezeNet v1.1 conv10 needs 64,000 weight words, so it runs as eight slices of 125 output channels.

## Flow control

- The cache pipes are always ready.
- The command pipe is ready while the command FIFO has room for one command.
- The result pipe is ready while the result FIFO holds at least one word.
- Inside the engine, each unit grants credit while its input FIFO has room. A full result FIFO stalls the serialiser and, behind it, the units.

## Testbenches

Every module has a self-checking testbench in `tb/`. They compare against a reference written with `real` arithmetic (`fp16_ref`), which shares no code with the RTL.

- `tb_fusion_accel` runs the whole chip with smaller caches. It covers:
  - several convolutions, including ones with several channel groups;
  - both pooling types;
  - an idle command;
  - a restart.
  
  It also exercises backpressure, from the result FIFO and from the unit credit.
- `tb_fusion_accel_full` runs at the default sizes. It computes one output row of SqueezeNet conv1: 113 positions × 64 channels, with 3×3 windows over 3 input channels padded to 8.

## Not included

- The vendor USB 3.0 core and the host library's endpoint modules. Their signals are ports of the top level.
- Clock generation. Both clocks are inputs.
- The host software.

## Where this design departs from the paper, or goes beyond it

- **Command layout.** The paper names the layer fields and some of their widths, but not their bit positions. The layout above is this design's own.
- **Operation codes.** The encoding of `op_type` is this design's own.
- **Floating-point cores.** The paper uses vendor cores. The operators here are this design's own, with the paper's latencies. Rounding and subnormal handling may differ from the vendor cores.
- **Max-pooling.** The paper's text contradicts itself on which comparator register is replaced. This design keeps the running maximum.
- **FIFO latency.** The paper's FIFOs take six cycles from write to not-empty. These take three.
- **Internal FIFO sizes.** The depths of the FIFOs inside the units, and the credit slack, are this design's own.
- **Serialiser.** The `pipe_serdes` packing follows the paper's listing, with one change: the write strobe drops when the pipe pauses, so a word is never written twice.
- **Write addresses.** The cache write addresses return to 0 on each `op_en` or `restart` edge.
- **Order of accumulation.** The order of the cache words, and so the order of the additions, is this design's own. FP16 sums depend on that order.
- **Timing.** None of the timing figures were reproduced cycle for cycle.

## Simulating

Each testbench builds on its own with plain verilator. Put the two packages first on the command line. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/fp16_pkg.sv rtl/fa_pkg.sv tb/fp16_ref.sv tb/tb_fusion_accel.sv \
  --top-module tb_fusion_accel -o sim && ./obj_dir/sim
```

Every testbench ends by printing `TB_RESULT checks=N failures=M`.
