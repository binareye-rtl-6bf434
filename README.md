# BinarEye: RTL of an always-on binary CNN processor

BinarEye is a processor for binary convolutional neural networks: networks whose
weights and activations are all +1 or -1. It is meant to run all the time as a visual
wake-up sensor, for example to detect a face or its owner, using milliwatts or less.
Two ideas make that possible.

* **Nothing leaves the chip.** All model weights (about 259 kB), both feature maps
  (2 x 32 kB) and the classifier weights (5 kB) live in on-chip SRAM. The chip takes an
  image in and returns a class label.
* **Weights sit next to the arithmetic.** A 64-neuron array keeps each neuron's 1024
  weights in local flip-flops. A layer loads the weights once (LD) and then reuses them
  for every position of the convolution (CONV). Only two new pixels are fetched per
  convolution step.

One knob, the **batch size S** (1, 2 or 4), trades accuracy for energy. With S = 1 a
layer has 256 filters over 256 channels. With S = 4 the same hardware runs four
independent 64-filter, 64-channel networks side by side, which needs 16 times fewer
neuron operations per image. The network depth is programmable with up to 16
instructions, and all weights can be reloaded.

This repository is a SystemVerilog implementation of that architecture. It is
synthesizable apart from the SRAMs, which are written as plain arrays. Every parameter
has the published chip's size. Where the published description stops (word widths,
handshakes, instruction encoding, the load protocol, cycle-level timing), this design
makes its own choices. They are listed in
[Departures and own choices](#departures-and-own-choices).

## The binary neuron

With +1 coded as bit 1 and -1 as bit 0, the product of two +/-1 values is an XNOR. A dot
product is therefore the number of agreeing bit pairs, rescaled:
`A.W = 2*count - N` for `N` inputs. A neuron outputs +1 when `A.W + b >= 0`.

The kernel is always 2x2, so a neuron that sees all 256 channels has 1024 inputs. The
neuron is built from four **sub-neurons** (`sub_neuron.sv`). Each one handles 64 channels
x 4 kernel positions = 256 XNORs and a bit count. The count is 8 bits wide, as in the
published block diagram. A count of 256 inputs can reach 256, so this design saturates
it at 255. Only the case where every pair agrees is clipped.

`neuron.sv` adds the four counts in a small tree: 8 bit + 8 bit -> 9 bit, then
9 + 9 -> 10 bit. Comparators at three levels give the binary outputs:

| S | outputs | compared value         | fires when               |
|---|---------|------------------------|--------------------------|
| 1 | 1       | sum of all 4 counts    | `sum10 + bias >= 512`    |
| 2 | 2       | counts 0+1, counts 2+3 | `sum9[m] + bias >= 256`  |
| 4 | 4       | each count alone       | `cnt[m] + bias >= 128`   |

The threshold is half the number of inputs. The 9-bit signed bias `b` therefore acts as
`sign(A.W + 2b)`. All S outputs of a neuron share its bias, because they apply the same
filter to S different maps.

## Batch size S: one array, three network widths

This is the part of the design that takes the most care. The 256 channel bits of a
pixel are always stored as one 256-bit word. S decides how that word is read.

* **Input side.** Map `m` of S occupies channels `m*256/S ... (m+1)*256/S - 1`.
  Sub-neuron `j` always reads channels `64j ... 64j+63`. With S = 1 all four sub-neurons
  work on one map. With S = 2, sub-neurons 0 and 1 see map 0 and 2 and 3 see map 1. With
  S = 4 each sub-neuron sees its own map.
* **Weights.** For S > 1 the S sub-neuron groups of a neuron should hold the same filter.
  The weight memory simply stores the copy, so LD is the same for every S.
* **Output side.** A layer has `F = 256/S` filters. The array computes 64 at a time, so
  a layer runs `4/S` LD-CONV phases. In phase `p`, neuron `n` writes:

| S | output `m` of neuron `n` goes to channel |
|---|------------------------------------------|
| 1 | `64p + n`                                |
| 2 | `128m + 64p + n`                         |
| 4 | `64m + n`                                |

The output map therefore has the same layout as the input map, and the next layer can
read it directly. `binareye_pkg::place_outputs` implements this table. Each phase writes
only its channels, through the SRAM's bit mask.

The S = 4 mode does one LD-CONV phase per layer and processes four maps at once. These
are the 16x fewer operations per image quoted above.

## A CNN layer, cycle by cycle

`controller.sv` runs each CNN instruction as `4/S` phases.

**LD (128 cycles).** The north and south weight SRAMs are 256 bits wide. In cycle `2n`
they deliver sub-neuron 0 and 2 of neuron `n`, and the bias SRAM delivers its bias. In
cycle `2n+1` they deliver sub-neurons 1 and 3. The data reaches the array's load bus one
cycle after the read. Weight and bias pointers run through the memories in program
order: a model is stored as its LD phases back to back, 128 words per side and 64
biases each.

**CONV.** The window moves along a row one pixel at a time. The activation SRAM returns
pixel `(x,y)` and `(x,y+1)` together, because it is banked by row parity
(`act_sram.sv`). `act_window.sv` shifts the right column of the 2x2 window to the left
and takes the new column. Fetching column `x` completes the window of output `(x-1,y)`.
A row of `w-1` outputs therefore takes `w` cycles. The pipeline is:

```
t    read column x of rows y, y+1 from the source SRAM
t+1  column enters the window buffer
t+2  all 64 neurons evaluate the window; outputs registered
t+3  output pixel (x-1, y) written to the destination SRAM (or to max pooling)
```

**DRAIN (4 cycles)** lets the last output, and a pooled pixel, reach memory before
the next LD overwrites the weights.

One layer thus takes `phases * (128 + (h-1)*w + 4)` cycles. The benchmark testbench
checks this exactly. An `h x w` input gives a `(h-1) x (w-1)` output, since the
convolution has stride 1 and no padding.

**West / east ping-pong.** The input layer fills the west SRAM. Each CNN layer reads one
activation SRAM and writes the other. The controller's `act_sel` records which one
holds the current map.

**Max pooling** (`maxpool.sv`) is streamed: 2x2 windows, stride 2, and an odd last row or
column is dropped (29x29 -> 28x28 -> 14x14). The maximum of +/-1 values is an OR. A
register pairs even and odd columns, and a 16-entry row buffer pairs even and odd rows.
A pooled pixel is written one cycle after its last input arrives.

## Classifier (FC layer)

`fc_unit.sv` reads the final map, one pixel per cycle. It XNORs each pixel with one
256-bit word per class from the 5 kB FC SRAM (160 words: 10 classes x 4x4 pixels). It
counts the agreeing bits in four 64-channel segments and combines them per map, as the
neuron does. Then it accumulates over the pixels. The largest count wins: ties go to the
lower class, and there is no FC bias. FC SRAM word `c*w*h + y*w + x` holds class `c` at
pixel `(x,y)`. The run takes `w*h*nlabels` cycles. The S labels follow on consecutive
cycles on `label`, each with `label_map` = map index.

## Memories

| memory             | organisation          | capacity | module          |
|--------------------|-----------------------|----------|-----------------|
| north weights      | 4096 x 256 bit        | 128 kB   | `sram_1p`       |
| south weights      | 4096 x 256 bit        | 128 kB   | `sram_1p`       |
| biases (south)     | 2730 x 9 bit          | ~3 kB    | `sram_1p`       |
| west activations   | 2 banks x 512 x 256 b | 32 kB    | `act_sram`      |
| east activations   | 2 banks x 512 x 256 b | 32 kB    | `act_sram`      |
| FC weights         | 160 x 256 bit         | 5 kB     | `sram_1p`       |
| program            | 16 x 22 bit           | -        | in `controller` |
| neuron weights     | 64 x 1024 + 64 x 9 FF | 8 kB     | `neuron`        |

That adds up to the published 259 kB of weight SRAM, 2 x 32 kB of feature SRAM and
5 kB of FC SRAM. A full S = 1 nine-layer model fills the weight SRAMs exactly: 8 layers
x 4 phases x 128 words = 4096 words per side.

## Instructions

An instruction is 22 bits, declared as `binareye_pkg::instr_t` (LSB first):

| bits  | field     | meaning                                           |
|-------|-----------|---------------------------------------------------|
| 1:0   | `op`      | 0 IO, 1 CNN, 2 FC, 3 no operation                 |
| 3:2   | `s`       | batch size: 0 S=1, 1 S=2, 2 S=4                   |
| 4     | `pool`    | CNN: 2x2 max pooling of the output                |
| 10:5  | `w`       | width of the instruction's input map (1..32)      |
| 16:11 | `h`       | height of the input map (1..32)                   |
| 20:17 | `nlabels` | FC: number of classes (1..10)                     |
| 21    | `last`    | end of program after this instruction             |

The program runs from entry 0 until an instruction with `last` set, or until entry 15.
Sizes are not carried from layer to layer: each instruction states its own input size.
An IO layer writes the west SRAM. A CNN layer needs `w, h >= 2`, which an assertion
checks.

## Ports and loading

`binareye_top` has the chip's three pin groups plus control:

| port | width | use |
|------|-------|-----|
| `wscan` | 3 | weight-scan port `{commit, shift, data}` |
| `in_valid`, `in_ready`, `in_data` | 1, 1, 16 | input map for an IO instruction |
| `label_valid`, `label`, `label_map` | 1, 4, 2 | class labels after FC |
| `start`, `busy`, `done` | 1 each | run the program |
| `clk`, `rst_n` | 1 each | clock, asynchronous active-low reset |

**Weight scan.** A frame is 271 bits: `{target[2:0], addr[11:0], data[255:0]}`. It is
shifted in MSB first, one bit per cycle with `shift` = 1. Then a cycle with
`commit` = 1 writes it. The targets are 0 north, 1 south, 2 bias (data[8:0]), 3 FC and
4 program (data[21:0]). Load only while `busy` is low.

**Input map.** Each pixel is sent as its 256 binary channel bits: 16 beats of 16 bits,
channel 0 in bit 0 of the first beat, pixels in raster order. `in_ready` stays high
until the map is complete.

## Files

| file | role |
|------|------|
| `rtl/binareye_pkg.sv` | constants, `instr_t`, S encoding, output placement |
| `rtl/sub_neuron.sv` | 256 XNORs + saturating 8-bit count |
| `rtl/neuron.sv` | 4 sub-neurons, local weights and bias, adder tree, comparators |
| `rtl/neuron_array.sv` | 64 neurons, load bus, registered outputs |
| `rtl/act_window.sv` | 2x2 window buffer at the array edge |
| `rtl/act_sram.sv` | banked 32 kB activation memory with pixel-pair reads |
| `rtl/sram_1p.sv` | generic SRAM with bit mask |
| `rtl/maxpool.sv` | streamed 2x2 max pooling |
| `rtl/fc_unit.sv` | binary FC layer and arg-max |
| `rtl/io_input.sv` | input layer |
| `rtl/scan_loader.sv` | 3-wire memory loader |
| `rtl/controller.sv` | program memory and LD/CONV/FC sequencer |
| `rtl/binareye_top.sv` | the processor |

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Build one with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/binareye_pkg.sv tb/tb_binareye_top.sv --top-module tb_binareye_top
./obj_dir/Vtb_binareye_top
```

Verilator finds the other modules through `-Irtl`, because each file is named after
its module. With `--assert`, the top level also checks three rules of the design:

* An activation SRAM is never read and written in the same cycle.
* The memories are loaded only while no program runs.
* The scan port never shifts and commits in the same cycle.

* Each `tb/tb_<module>.sv` tests one module against an independent model: the neuron
  arithmetic for all S, window shifting, banked reads, pooling of odd and even sizes,
  FC labels and latency, the load protocol, and the controller's read order, output
  placement and cycle counts.
* `tb_binareye_top` loads a model through the scan port and sends images through the
  input port. It runs two programs that use IO back-pressure, S = 1, 2 and 4, pooling,
  several LD phases, the west/east swap and FC. It checks every label and the stored
  feature maps against a reference model. It runs in seconds.
* `tb_benchmark9` runs the published 9-layer benchmark shape (32x32 input, layers
  on 32, 31, 30, 29+pool, 14, 13+pool, 6, 5, FC 4x4 -> 10 classes) at S = 4, 2 and 1,
  with random weights. It checks the labels and the cycle count of each layer. It runs
  for about half a minute.

## Performance of this implementation

With one output pixel per cycle and 128-cycle loads, the eight CNN layers of the
benchmark network take 5,048 cycles (LD and CONV) at S = 4, 10,096 at S = 2 and 20,192
at S = 1. The FC layer adds 160 cycles. The input layer adds 16,384 cycles, because a
32x32 map of 256-bit pixels over a 16-bit port takes 16 beats per pixel.

The published chip reaches 281, 81 and 25 inferences per second per MHz. Counting the
S maps of one run as S inferences, that is about 14,200, 24,700 and 40,000 cycles per
run. This design's CNN part fits well within those budgets. With its input layer added,
it fits at S = 1 and S = 2 but not at S = 4. The chip evidently receives a far more
compact pixel format and encodes it on chip; see below.

## Departures and own choices

Taken from the published description:

* 64 neurons, 4 sub-neurons of 64x2x2, S in {1, 2, 4}, F = C = 256/S.
* XNOR/bit-count/comparator arithmetic, and the 8/9/10-bit adder tree.
* A 9-bit bias, and LD/CONV phases with local weight flip-flops.
* Reuse of two window pixels per step, and streamed max pooling.
* The memory capacities.
* A 16-instruction program of IO, CNN and FC instructions.
* Maps up to 32x32, up to 10 classes.
* 16-bit input, 4-bit label and 3-bit weight-scan pin groups.

This design's own:

* **Input encoding.** How the 7-bit RGB image becomes 256 binary channels is not
  published. Here the host sends the 256 bits per pixel. As a result the input layer is
  much slower than on the chip.
* **Saturation.** The 8-bit sub-neuron count saturates at 255.
* **Comparator.** The rule is `count + bias >= N/2`, and the S outputs of a neuron share
  one bias.
* **Word widths.** The SRAM word widths, the 2-cycles-per-neuron LD and the row-parity
  banking of the activation SRAM are all this design's.
* **Pointers.** Weight and bias pointers advance automatically, and the FC weights
  always start at FC address 0.
* **Formats.** The instruction format, the scan frame format and all handshakes.
* **FC layer.** The FC layer has no bias, and a tie goes to the lower class.
* **Pooling buffer.** Pooling uses a row buffer.
* **Clocking and power.** The enable flip-flops stand for clock gating. The chip's two
  supply domains (array, and memories plus control) and its 1.8 V I/O pads have no RTL
  counterpart.
* **SRAMs.** The SRAMs are behavioural arrays with one-cycle reads. A real
  implementation would use compiled macros with the same ports.
