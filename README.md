# eCNN in SystemVerilog: a block-based CNN processor for image inference

eCNN runs convolutional networks for image restoration on an edge device. Examples are
super-resolution, denoising and style transfer. It avoids the usual DRAM traffic for
intermediate feature maps. An image is cut into blocks (128x128 pixels by default). The whole
network runs on one block while every intermediate feature map stays in on-chip block
buffers. Only the input block enters the chip and only the output block leaves it. Each layer
shrinks the valid region a little (the "truncated pyramid"). Neighbouring input blocks
therefore overlap, so the block's output never needs the neighbours' features.

The processor is programmed with a coarse-grained SIMD instruction set, FBISA. One
instruction applies a whole layer to a whole block, so a complete super-resolution network is
a few dozen instructions. The hardware is built so that one instruction streams through the
block at one 4x2 pixel tile per cycle, with 32 channels and up to four 3x3 convolutions per
instruction.

This repository holds a synthesizable implementation of that processor:

- the decoder for the compressed parameter bitstreams
- the 81,920-multiplier convolution engines
- the eight-bank block buffers
- the tile-pipelined inference datapath
- the controller that overlaps parameter decoding with computation

It also holds self-checking testbenches, including an end-to-end test against a pixel-level
reference model.

## The instruction set as built

A **leaf-module** is one 32-channel to 32-channel 3x3 convolution applied to one block. An
instruction holds one to four leaf-modules that share the same input. Their results are
combined according to the opcode:

| opcode | value | what the leaf-modules do |
|---|---|---|
| `CONV` | 0 | results summed (e.g. 64 or 128 input channels as several 32-channel slices) |
| `ER`   | 1 | each leaf is a 3x3 conv, ReLU, 8-bit quantization, then a 32ch 1x1 conv; results summed. This is the residual block of the networks the engine was made for |
| `UPX2` | 2 | leaf k produces sub-pixel (k mod 2, k div 2) of a 2x pixel shuffle |
| `DNX2` | 3 | result downsampled 2x: strided (`misc`=0) or 2x2 max pooling (`misc`=1) |
| `END`  | 7 | end of the program for this block |

Every instruction has the following operands and fields:

- **Source (`src`) and destination (`dst`).** Each is one of the three block buffers (0..2)
  or the virtual FIFO (3). The FIFO is DI when it is the source and DO when it is the
  destination.
- **Optional `srcS`.** A residual input that is added after the convolution. It is shifted
  left by `srcs_shl` to align its Q-format.
- **Optional `dstS`.** A second copy of the result, quantized to its own Q-format.
- **Output block size** in 4x2 tiles (`w_m1`, `h_m1`).
- **Output origin in the source frame** (`ox`, `oy`). The input windows start one pixel up
  and to the left of it.
- **Destination origin** (`dx`, `dy`).
- **Inference type.** Truncated pyramid (`itype`=0) reads real pixels around the block edge.
  Zero-padded (`itype`=1) reads zeros outside the output block.
- **Q-format fields.** Each Q-format is given as a shift: bias alignment `b3_shl`/`b1_shl`,
  the quantization shift inside ER `mid_shr`, and the output shifts `out_shr`/`dsts_shr`.
  Signed/unsigned flags go with each feature operand.
- **Restart address.** A byte address into the bias bitstream (see below).

The word is 128 bits wide. Its layout is `ecnn_pkg::instr_t`; the binary format is this
design's own. With that width, the 6KB program memory holds 384 instructions. The largest
program the design was sized for (a 4x super-resolution network) is 45 instructions.

Quantization everywhere means: add half an LSB, shift right arithmetically, then clip to
[-128,127] (Qn) or [0,255] (UQn). Partial sums are never quantized on the way:

- The 3x3 engine produces 24-bit sums per channel.
- The post-processing accumulates leaf-modules in 28 bits.

## Datapath at a glance

```
      host load ports                              DI tiles            DO tiles
            |                                         |                   ^
   +--------v---------- IDU -----------+   +----------v------ CIU --------|-------+
   | program memory -> instruction     |   | tile fetch -> line FIFO ->   |       |
   |   decode -> 21 parameter memories |   |   window queue (RF6x4) ->    |       |
   |   -> 21 Huffman decoders ---------+---+-> LCONV3x3 -> LCONV1x1 ->    |       |
   |   (weights/biases, tagged pairs)  |   |   ACCI -> ADDE/ReLU/quant -> Dst reorder
   +-----------------------------------+   |   block buffer file (3 BBs x 8 banks)  |
                                           +----------------------------------------+
```

`ecnn_top` connects two units that form a two-stage instruction pipeline:

- The **IDU** (instruction decode unit) fetches instruction k+1. It decompresses that
  instruction's weights and biases into one bank of the engines' ping-pong registers.
- The **CIU** (CNN inference unit) meanwhile computes instruction k from the other bank.

The controller hands an instruction to the CIU only when two things hold: its parameters are
complete, and the CIU has finished the previous instruction. This guarantees that the bank
being overwritten is never in use. The end-to-end testbench counts these overlaps.

## Parameter bitstreams and the decoder

A leaf-module needs 9x32x32 = 9,216 CONV3x3 weights. An ER leaf also needs 1,024 CONV1x1
weights and 64 biases. All of them must be in the engines before the leaf-module's first tile.
They are stored compressed in **21 independent bitstreams**, each read by its own decoder:

- streams `2p+h`, p = 0..8, h = 0..1: CONV3x3 weights of filter position p, output channels
  16h..16h+15;
- streams 18 and 19: CONV1x1 weights, same halves;
- stream 20: biases. Per leaf-module this is 32 CONV3x3 biases, then (ER only) 32 CONV1x1
  biases.

Inside a weight stream, coefficients come leaf-module by leaf-module, then output channel by
output channel, with the 32 input channels of one output channel consecutive. Each weight
stream thus carries 512 coefficients per leaf-module. Each decoder (`huffman_decoder`)
produces two coefficients per cycle, so one leaf-module takes 256 cycles.
`tb_parameter_decompress` measures exactly that: 1,029 cycles for four leaf-modules.

**Coding.** Values are coded as in JPEG DC coefficients. A Huffman codeword gives the size
category S (0..7), and S raw bits follow:

- a leading 1 in the raw bits means a positive value;
- otherwise the value is the raw bits minus 2^S-1.

**Restart segments.** Every segment of every stream starts with its own code table. It is an
8-byte header:

- eight 4-bit counts of the codewords of length 1..8;
- then the eight symbols in canonical order.

**Restart addresses.** An instruction gives a byte address R in the bias stream. The 20
weight streams restart at byte 8R, because a weight stream carries eight times as many
coefficients per leaf-module as the bias stream (512 against 64). This is why the parameter
memory splits into 20 weight memories of 64KB and one 8KB bias memory, 1,288KB in total.
Several instructions may share parameters by naming the same restart address.

**Decoder internals.** The decoder keeps a 128-bit bit buffer filled from 32-bit memory
words, stored big-endian with byte 0 in bits 31:24. It decodes two symbols per cycle from the
top of the buffer with a canonical-code comparator per length. It stalls only when fewer than
30 bits (two longest codes) are buffered.

**Tagging and distribution.** `parameter_decompress` tags each decoded pair with its
leaf-module, its output channel and its input-channel pair, and broadcasts it. Each engine's
weight registers pick out their own pairs. This is the second stage of the distribution
network.

## Convolution engines

`lconv3x3` is 32 output-channel engines (`lconv3x3_32to1`). Each of them is 32
`filter2d_3x3` units, one per input channel. A unit computes a 3x3 filter at the eight pixels
of a 4x2 tile from a 6x4 input window in one cycle. That is 72 multipliers per unit and
73,728 in all.

- Each engine adds its bias, shifted left by `b3_shl`, to the sum over input channels.
- It registers the 24-bit result.
- It also registers an unsigned 8-bit quantization of that result (ReLU included) for the
  1x1 engine.

`lconv1x1` performs the 32x32 1x1 convolution on that 8-bit tile (8,192 multipliers) and adds
its shifted bias.

All weights live in two banks of four leaf-modules each, loaded from the broadcasts. The
engines switch leaf-modules every cycle by index.

## The tile pipeline of the inference datapath

`inference_datapath` is the CIU's controller and post-processing. For an output block of w x h
tiles it scans (w+1) x (h+1) input tiles of 4x2 pixels, starting at (ox-1, oy-1). Each input
tile is read exactly once, from a block buffer at any alignment or from DI. The 6x4 window of
an output tile is assembled from four input tiles:

- the current tile;
- the tile above it, from the **line FIFO**, which holds one row of tiles;
- the two tiles to the left, from two registers.

Windows wait in a four-entry queue. Its head plays the role of the RF6x4 register file and is
held for one cycle per leaf-module. The pipeline after that is fixed:

| stage | work |
|---|---|
| E0 | window and leaf index into LCONV3x3 |
| E1 | 8-bit ReLU'd CONV3x3 result into LCONV1x1 (ER) |
| E2 | ACCI: leaf-module results summed on the fly; srcS read issued |
| E3 | ADDE (residual), ReLU, quantization to dst and dstS, Dst reorder, write or push to DO |

A few mechanisms need more explanation:

- **Residual bypass.** When srcS is the source buffer itself (the usual residual block), the
  residual pixels are already in the window. They are taken from the window centre instead of
  a second read of the same buffer.
- **DO back-pressure.** The emit stage stops while the 8-entry DO FIFO has fewer than five
  free entries, which covers every tile still in the pipeline. The fetch stage waits while DI
  is empty.
- **Up/down-sampling.**
  - UPX2 writes each leaf-module's tile as stride-2 pixels from (dx+8tx, dy+4ty).
  - DNX2 writes two pixels per tile at (dx+2tx, dy+ty). Each pixel is the top-left one
    (strided) or the maximum of a 2x2 group (max pooling).
  - The stream destination DO is allowed only for CONV and ER.

**Rate.** The rate is one leaf-module of one tile per cycle. An instruction takes about
max(n·w·h + w + 2, (w+1)(h+1)) + 6 cycles, where n is the number of leaf-modules.
`tb_inference_datapath` checks that bound for every instruction whose timing is not set by
the testbench's DI or DO pacing.

## Block buffers and their bank mappings

Each block buffer holds 128x128 pixels of 32 channels, split over eight banks so that any 4x2
window is one access per bank. Two mappings are used.

**Normal mapping.** Pixel (x, y) is in bank (x mod 4) + 4(y mod 2), at address
floor(x/4) + floor(y/2)·32. Every window hits eight different banks whatever its alignment.

**Interleaved mapping.** Needed for buffers written by UPX2. A 2x pixel shuffle writes eight
pixels spaced two apart, and under the normal mapping those collide in two banks. The
interleaved mapping XORs the bank number with {x[2], 0, x[2] xor y[1]}. That puts the eight
stride-2 pixels of any upsampled tile into eight banks.

The interleaved mapping cannot serve every window alignment. An exhaustive search over all
bank maps with an 8x4 or 8x8 period finds none that serves both every window alignment and
the stride-2 pattern. This one serves windows that start on an odd row or an even column.
`instruction_decode` rejects instructions that would read or write an interleaved buffer at
another alignment, and flags them as `error`. In practice the next layer reads an upsampled
block with `oy` even or `ox` odd.

`bb_file` checks every access with assertions:

- no bank is used twice in a cycle;
- the two read ports never select the same buffer;
- the two write ports never select the same buffer.

## Interfaces of the top level (`ecnn_top`)

| port | direction | meaning |
|---|---|---|
| `prog_we/addr/data` | in | program load, one 128-bit instruction per write |
| `par_we/sel/addr/data` | in | parameter load: 32-bit word `data` into memory `sel` (0..17 CONV3x3 streams, 18..19 CONV1x1, 20 biases) |
| `start` | in | pulse: run the program on one block |
| `busy`, `done` | out | program running; one-cycle pulse when the last instruction has finished |
| `error` | out | an illegal instruction ended the block |
| `di_valid/ready/data` | in/out/in | input tiles, 8 pixels x 32 channels, in scan order of the DI instruction |
| `do_valid/ready/data` | out/in/out | output tiles, same format, in the output block's tile order |
| `ev_do_stall`, `ev_di_wait`, `ev_bypass`, `ev_overlap` | out | event pulses: emit stalled on DO, fetch waiting for DI, residual bypass used, decode overlapping inference |

Other details of the top level:

- Reset is asynchronous and active low, on all control state.
- The memories and datapath registers are not reset. Everything that is read before it is
  written is either masked or overwritten first.
- The program memory, parameter memories and block buffers are plain arrays with one cycle
  of read latency. The SRAM macros of a chip would replace them.

## Where this design departs from, or adds to, the original description

- **Line FIFO size.** All leaf-modules of one instruction read the same input, so one line of
  tiles (BW/4+1 = 33 entries of 256 bytes) suffices. The original provisions 34KB for four
  leaf-modules with separate inputs.
- **Formats of this design's own.** These include:
  - the instruction word;
  - the Q-format encoding as shifts;
  - the bitstream table header;
  - the word width and byte order of the parameter memories;
  - the DI/DO handshakes and the 8-entry DI/DO FIFOs;
  - the order of the biases within the bias stream.
- **Interleaved-buffer restriction.** Some window alignments on interleaved buffers are
  rejected, as described above.
- **DO for up/down-sampling.** UPX2 and DNX2 cannot write to DO.
- **Not modelled:**
  - the SRAM macros, clocking, power and pads;
  - the external host and its DRAM traffic;
  - sub-model sequencing across blocks, which is done by re-running `start` with a new
    program.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block's outputs with
values computed independently in the testbench, and ends with a
`TB_RESULT checks=N failures=M` line.

| testbench | what it covers |
|---|---|
| `tb_program_memory` | read latency, read-during-write, out-of-range reads |
| `tb_instruction_decode` | 3,000 random instruction words against the decoding rules, including every illegal case |
| `tb_parameter_memory_file` | all 21 memories read in parallel, bias address wrap |
| `tb_huffman_decoder` | random segments at unaligned restart bytes, the paper's code table, two values per cycle |
| `tb_parameter_decompress` | full size: 4-leaf ER and 2-leaf CONV instructions; every coefficient tagged and delivered once; 256 cycles per leaf-module |
| `tb_lconv3x3`, `tb_lconv1x1` | direct convolution against both weight banks, random Q shifts |
| `tb_line_fifo` | row-delayed reads for random row lengths |
| `tb_bb_file` | random windows at any alignment on all four ports; stride-2 shuffle writes; eight distinct banks for every pattern |
| `tb_inference_datapath` | the CIU with real engines and buffers, a six-instruction program (CONV from DI, ER with bypass, UPX2, DNX2 max pooling with dstS, CONV to DO with srcS), every buffer pixel and DO value against the reference, cycle bound per instruction |
| `tb_ecnn_top` | end to end (details below) |

`tb_ecnn_top` runs the whole processor end to end:

- It compresses random parameters into the 21 bitstreams and loads them with the program.
- It runs two blocks with DI gaps and DO back-pressure.
- It compares every DO value with the reference.
- It counts DO stalls, DI waits, bypasses, decode/inference overlaps, ER/UPX2/DNX2
  instructions, dstS writes, zero-padded instructions and bank switches. Any count that stays
  at zero is a failure.
- It finishes with an illegal instruction that must raise `error`.

`tb/ecnn_ref.svh` is the pixel-level reference model of the instruction semantics. It works
on whole images in plain arrays, with no tiles or banks. `tb/ecnn_prog.svh` holds the test
program, `tb/huff_enc.svh` the bitstream encoder, and `tb/ecnn_stream.svh` the stream
builder.

**Reduced sizes.** The CIU and top-level tests use 4 channels and 32x32 blocks; the datapath
logic is identical at every size. The decoder test runs at the full 32 channels. At the
default parameters (32 channels, 128x128 blocks, 73,728 + 8,192 multipliers) the top level
passes lint and elaboration. However, building its cycle-accurate simulation model takes
longer than ten minutes, so there is no full-size end-to-end simulation. The largest simulated
configurations are the 4-channel, 32x32 end-to-end run and the 32-channel parameter
decompressor.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ecnn_pkg.sv tb/tb_ecnn_top.sv --top-module tb_ecnn_top -o sim
./obj_dir/sim
```

Gate-level synthesis completes for the memories, the decoders, the line FIFO and a single
32-channel CONV3x3 engine (74,676 cells). The full LCONV3x3 and LCONV1x1 arrays, the block
buffer file, the CIU and the top level elaborate cleanly, but they exceed the loop-unrolling
or run-time limits of the open-source synthesis flow, so no cell counts are given for them.

Some remaining lint warnings are deliberate:

- **Unused bits.** Decoded fields such as the input tile counts and the leaf count are
  provided for users of the decoder and are not all consumed inside the top level.
- **Width truncations.** These are on memory indices whose range is limited by construction.
- **Reset used as data.** The block-buffer assertions are gated by the asynchronous reset so
  that they stay quiet before reset; Verilator reports this as a reset net used synchronously.
