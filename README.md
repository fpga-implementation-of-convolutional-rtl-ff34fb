# Handwriting recognition on a small floating-point RISC processor

This design reads handwritten digits and letters from a camera in real time.
It is built for a DE1-class FPGA. A camera picture is reduced to a 32 x 32
grayscale image. A small convolutional network then classifies it into 36
classes (10 digits and 26 case-insensitive letters). The predicted character
is sent over a UART line and shown on the LEDs.

The network does not run on a fixed-function accelerator. It runs as firmware
on a custom 32-bit, five-stage pipelined RISC processor with IEEE-754 single
precision arithmetic. The hardware supplies only:

- the image path (camera, gray conversion, VGA display and block-average
  compression);
- a few memory-mapped peripherals;
- a processor that is good at one job: a multiply-accumulate loop over
  floating-point numbers.

The network's layers (convolution, average pooling, fully connected layers,
argmax) are loops in assembly. Changing the network therefore means changing
the firmware and the weight memory, not the RTL.

## System overview

```
 camera --> ccd_capture --> raw2gray --> (frame buffer: external SDRAM controller + SDRAM)
                                                         |
                                 raster-order gray pixels v
  monitor <-- vga_controller <-------------------------------+
                 |  224x224 window pixels
                 v
        image_compressor_x  <-- compress_control <-- processor (0xC008)
                 | 28x28 averages, written as a zero-padded 32x32 image
                 v
             image_mem  ------> processor (0x10000...)    weight_rom --> processor (0x20000...)
                                   |
                                   +--> UART (0xC004), LEDR (0xC000), SW (0xC001)
```

`image_recog` is the top level. It holds the processor (`cpu`), the address
decoder, the peripherals and the image path. Everything runs on one clock
(50 MHz on the board). The 25 MHz VGA pixel rate is a clock enable that is
high every other cycle. The camera's pixel clock is assumed to be the same
clock.

These parts are outside the RTL and connect through top-level ports:

- the SDRAM frame buffer and its controller: `fb_wr_*` carries gray pixels
  out, and `fb_rd_req`/`fb_rd_gray` returns them in raster order;
- the camera's I2C configuration;
- the PLL.

`prog_*` and `wload_*` load the instruction memory and the weight memory
before reset is released. On an FPGA these would be initialised by the
bitstream.

### Address map (32-bit word addresses)

| Address | Contents |
|---|---|
| `0x0000_0000`-`0x0000_1FFF` | data memory, 8K words, inside the processor |
| `0x0000_C000` | LEDR[9:0]: write sets the LEDs; read returns them |
| `0x0000_C001` | SW[9:0], read only |
| `0x0000_C004` | UART: a write sends `wdata[7:0]`; a read returns `{22'b0, tx_full, rx_valid, rx_byte}` and removes the byte from the receive FIFO |
| `0x0000_C008` | snapshot: write 1 to request one compressed frame; reads 1 until the image is in `image_mem` |
| `0x0001_0000`-`0x0001_03FF` | `image_mem`: 32 x 32 pixels, 0..255, zero-extended |
| `0x0002_0000`-`0x0002_F8A5` | `weight_rom`: 63,654 single-precision weights |

Other addresses read 0, and writes to them are ignored.

## The processor

### Instruction format

Every instruction is 32 bits. The opcode is in bits [31:27].

| Field | Bits |
|---|---|
| destination `d` | [20:16] |
| first source `s` | [12:8] |
| second source `t` | [4:0] |
| 8-bit signed immediate / load-store offset | [7:0] |
| 16-bit immediate (LLB, LHB) | [15:0] |
| branch condition | [26:24] |
| 12-bit signed branch/JAL offset | [11:0] |

The branch or JAL target is `pc + 1 + offset`. JR jumps to the register in
[12:8].

| Group | Instructions |
|---|---|
| Integer | ADD, ADDZ (executes only if Z is set), SUB, AND, NOR, SLL, SRL, SRA, ADDI, SUBI |
| Constants | LLB (sign-extends a 16-bit immediate), LHB (replaces the upper 16 bits) |
| Memory | LW, SW (`R[s] + offset`), PUSH, POP |
| Control | B with eight conditions (NEQ, EQ, GT, LT, GTE, LTE, OVFL, unconditional), JAL (links R31), JR, HLT |
| Extended | MUL, UMUL (16 x 16 to 32 bits), ADDF, SUBF, MULF, ITF (int to float), FTI (float to int) |

Integer ADD, SUB, ADDI and SUBI saturate. The result clamps to `0x7FFF_FFFF`
or `0x8000_0000` and sets V. R0 always reads 0.

### Flags

There are three flags: zero Z, overflow V and negative N.

| Instructions | Flags written |
|---|---|
| ADD, ADDZ, SUB, ADDI, SUBI, ADDF, SUBF, MULF | Z, V and N |
| AND, NOR, SLL, SRL, SRA | Z only |
| everything else, including MUL, UMUL, ITF and FTI | none |

For the floating-point operations, Z is the OR-reduction of bits [30:0], so
-0 counts as zero. N is bit 31, and V is always 0.

A compare is just a SUB or SUBF into any register, followed by a branch.

### Pipeline

| Stage | Work |
|---|---|
| IF | PC and the 1K-word instruction memory |
| ID | decode; read the register file; resolve branches, JAL and JR |
| EX | integer ALU, EXT_ALU, stack |
| MEM | 8K data memory, or the external bus for any address at or above 8192 |
| WB | register write |

The register file is two 32 x 32 dual-port arrays written in parallel. Each
array serves one read port. A write and a read of the same register in the
same cycle are bypassed.

Hazards are handled as follows. The rules are this implementation's; the
pipeline outline is the original design's.

- **Forwarding.** EX takes its operands from the EX/MEM or MEM/WB register
  when an older instruction is about to write them.
- **Load-use stall.** An instruction that needs the result of the LW (or
  external read) just ahead of it waits one cycle in ID.
- **Branches.** These are resolved in ID. A taken branch, JAL or JR
  squashes the one instruction fetched behind it. A conditional branch
  directly behind the instruction that sets the flags still sees the new
  flags: the flags computed in EX are forwarded to ID, so a compare followed
  by a branch costs no stall.
- **JR** waits in ID while the instruction writing its register is in EX or
  MEM.
- **HLT** stops fetch as soon as it is decoded. The `halted` output rises
  when it reaches WB.

### Stack

PUSH and POP use a separate 1K-word stack memory with its own pointer. It is
not part of the data memory.

- PUSH writes at SP and then decrements it.
- POP increments SP and then reads, so it returns the last value pushed.
- SP starts at 1023.
- The popped value is registered at the end of EX and then forwarded like
  any other result.

### EXT_ALU and floating point

EXT_ALU holds five combinational units. A 3-bit function code selects the
output.

| Code | Operation |
|---|---|
| 000 | MUL (signed) |
| 001 | UMUL |
| 010 | ADDF |
| 011 | SUBF |
| 100 | MULF |
| 101 | ITF |
| 110 | FTI |
| 111 | `0xDEADDEAD` |

The result is registered (`dst_EX_DM`). SUBF is ADDF with the sign of the
second operand inverted: `SUBF d, s, t` gives `s - t`.

The floating-point adder works like a textbook fixed-point adder, step by
step:

1. Take the larger exponent as the common exponent.
2. Restore the hidden bits.
3. Shift the smaller operand right by the exponent difference. A difference
   above 24 clears that operand.
4. Convert both to 26-bit two's complement numbers and add them.
5. Take the sign from the sum.
6. Normalise with a leading-one search.
7. Repack.

There are no guard, round or sticky bits. The result is truncated toward
zero. So ADDF can be up to one unit in the last place below the correctly
rounded answer, and a little more when the smaller operand's shifted-out
bits matter. The multiplier forms the exact 48-bit mantissa product and also
truncates.

For both units:

- overflow gives infinity;
- results below the normal range become subnormals;
- infinities and NaNs follow IEEE rules, and a NaN result is `0x7FC0_0000`.

ITF and FTI also truncate. FTI saturates at ±2^31; infinities and NaN
saturate by their sign bit.

Truncation is this implementation's choice; the original design does not
describe any rounding. The firmware's results therefore differ slightly from
those of a PC running the same network.

## The image path

**ccd_capture.** This block takes the 12-bit Bayer samples of a D5M-style
camera together with the frame-valid and line-valid signals. It passes on
the valid samples with x and y counters and counts frames. `iSTART` enables
it and `iEND` stops it at the next frame boundary.

**raw2gray.** This block averages each 2 x 2 Bayer quad (R, G, G, B) into
one 12-bit gray pixel, so the gray picture is half the size of the sensor
array. A one-line buffer holds the previous sensor row. Its size is the
`WIDTH` parameter, 1280 by default, which is an assumption about the
sensor.

**vga_controller.** This block generates 640 x 480 at 60 Hz timing from the
25 MHz enable:

| Direction | Total | Visible | Front porch | Sync | Back porch |
|---|---|---|---|---|---|
| Horizontal | 800 | 640 | 16 | 96 | 48 |
| Vertical | 525 | 480 | 10 | 2 | 33 |

In the visible area it requests one frame-buffer pixel per pixel clock and
shows it in gray. It also does three more things:

- It passes the 224 x 224 capture window (x 208-431, y 128-351) to the
  compressor with window coordinates 0-223.
- It draws a 2-pixel red frame around that window.
- It shows the current contents of `image_mem` as a 32 x 32 echo in the
  top-left corner.

**image_compressor_x.** This block turns the window into the network input.
Each 8 x 8 block becomes the upper 8 bits of its 14-bit pixel sum, which is
the floor of the mean.

- There are only 28 accumulators, one per block column. A row of blocks is
  finished before the next row starts, so they are reused for every row.
- The last pixel of a block writes that block's average to address
  `(row + 2) * 32 + col + 2`. The 2-pixel zero border needed by the first
  5 x 5 convolution is therefore never written, and stays 0 from reset.
- A counter `compress_addr` resets to 784 and is cleared by `start`. It
  counts the 784 writes and then stops, so one start compresses exactly one
  frame.

**compress_control.** This block starts the compressor. It has three states:
idle, waiting for a frame, and busy.

1. The firmware writes 1 to `0xC008`.
2. The controller waits for pixel (0,0) of the capture window. While the
   pause key (KEY2, active low) is held, it does not start, so the user can
   freeze the picture until it is framed well.
3. It pulses `start` and reports busy until the compressor has written all
   784 pixels.

`0xC008` reads 1 from the request until the image is complete, so the
firmware simply polls it.

**UART.** The UART sends and receives 8N1 frames at `CLKS_PER_BIT` clocks
per bit: 434, which is 115200 baud at 50 MHz. Writes go through a 16-entry
transmit FIFO, and received bytes go into a 16-entry receive FIFO. A write
when the transmit FIFO is full is dropped.

## The firmware model

The firmware keeps data in the data memory as follows:

| Words | Contents |
|---|---|
| 0-1023 | the image as floats |
| 1024-5727 | the first convolution (6 x 28 x 28) |
| 5728-6903 | the first pooling (6 x 14 x 14) |
| 0-1599 | the second convolution (16 x 10 x 10), reusing the space |
| 1600-1999 | the second pooling (400) |
| 2000-2119 | the first fully connected layer (120) |
| 2120-2203 | the second fully connected layer (84) |
| 8000-8035 | the 36 class scores |

The weights are stored in `weight_rom` in this order:

| Layer | Words |
|---|---|
| conv1 (6x1x5x5) | 150 |
| conv2 (16x6x5x5) | 2,400 |
| fc1 (400x120) | 48,000 |
| fc2 (120x84) | 10,080 |
| fc3 (84x36) | 3,024 |
| Total | 63,654 |

That is exactly the depth of `weight_rom`.

The firmware flow is:

1. Request a snapshot and poll until it is done.
2. Convert the 1024 pixels with ITF.
3. Run the layers as multiply-accumulate loops (`LW`, `LW`, `MULF`, `ADDF`).
   ReLU is a sign test and a branch.
4. Send the index of the largest score as `'0'-'9'` or `'A'-'Z'`.

`tb/cnn_workload_tb.sv` contains a complete firmware of this kind. It is
written with the instruction encoder of the test package and fits in the
first 400 words of the instruction memory. A classification takes about 2.9 million cycles from the
start of the snapshot to the UART byte, which is 58 ms at 50 MHz. Most of
that time goes to the convolution layers. The original design reports about
3.7 million cycles for its firmware.

The inner loops are written with the pipeline in mind:

- loads are grouped ahead of their uses, so the load-use stall rarely
  triggers;
- MULF and ADDF results are forwarded back-to-back;
- the flags set by the SUBI that counts down the loop are tested by the
  branch right behind it at no cost.

## Departures from the original description

- **Image memory size.** The memory map table gives 784 words for the image
  memory. The compressor and network text need a padded 32 x 32 image, so
  the image memory has 1024 words.
- **Weight memory size.** The memory map table gives 7,840 words for the
  weight memory (the digits-only linear classifier). The main network needs
  63,654 words, which is what is built.
- **Class scores.** The data memory map reserves words for ten class scores,
  but the network has 36. The scores occupy 8000-8035.
- **Clocking.** There is a single clock with a pixel enable, instead of
  separate PLL clocks. The compressor runs on the system clock and takes one
  window pixel per enable.
- **Memory loading.** The instruction and weight memories have load ports
  instead of being initialised from files at synthesis.
- **Memory reads.** The instruction, data and register memories read
  asynchronously, so the pipeline needs no extra stage. On an FPGA they
  would map to distributed RAM or registers, not block RAM. The same holds
  for the 63,654-word weight memory, which then needs a registered read
  stage to fit block RAM.
- **Floating-point arithmetic** truncates (see above).
- **Unspecified details** are this implementation's own choices: the hazard
  rules, the UART settings, the Bayer-to-gray method and the VGA window
  position.

## How far it has been checked

Every block has been simulated against an independent model. The whole
system has been simulated through three complete classifications: the CNN,
the linear classifier and the two-layer network. All of it passes Verilator
lint and a Yosys elaboration.

Three things have not been done:

- **Timing.** No timing analysis has been run. The floating-point adder,
  multiplier and converters are single-cycle combinational logic in EX, and
  whether they close at 50 MHz on the target FPGA is untested.
- **Hardware blocks outside the RTL.** The SDRAM controller, the camera's
  I2C setup and the PLL are not part of it. The camera and frame buffer
  have only been exercised through testbench models of their signals.
- **Real weights.** No trained weights exist for this RTL. The tests use
  generated weights and check arithmetic, not recognition accuracy.

## Simulating

Every testbench is self-checking. Each ends with a line
`TB_RESULT checks=N failures=M`. A plain Verilator run looks like this (run
from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert rtl/cpu_pkg.sv tb/fp_tb_pkg.sv \
    $(ls rtl/*.sv | grep -v cpu_pkg) tb/cpu_tb.sv --top-module cpu_tb -o sim
./obj_dir/sim
```

Replace `cpu_tb` with any other testbench. `fp_tb_pkg.sv` holds helpers:

- real/float conversion with truncation;
- an instruction encoder for writing small programs inline.

| Testbench | What it checks |
|---|---|
| `fp_adder_tb`, `fp_multiplier_tb`, `int_to_float_tb`, `float_to_int_tb`, `int_multiplier_tb` | Directed IEEE corner cases (zeros, subnormals, infinities, NaN, overflow, cancellation), every pair of 16 boundary values of the format (smallest and largest subnormal and normal of each sign, the neighbours of ±1, zeros, infinities) and thousands of random operands. The references come from the simulator's `real` arithmetic, converted with truncation. The multiplier and conversions are bit-exact; the adder is checked to within 2 ulp. |
| `ext_alu_tb`, `alu_tb` | Every function code, the flag rules and saturation. |
| `reg_file_tb`, `stack_tb`, `instr_mem_tb`, `data_mem_tb`, `image_mem_tb`, `weight_rom_tb` | The storage blocks against array models. |
| `cpu_tb` | A program that uses every instruction class, checked in the data memory, plus all eight branch conditions over five flag states. It also counts forwarding, load-use and JR stalls and taken branches. |
| `image_compressor_x_tb`, `compress_control_tb`, `ccd_capture_tb`, `raw2gray_tb`, `vga_controller_tb`, `uart_tb` | The image path and the UART, against behavioural models. The UART is tested in loopback at 16 clocks per bit. |
| `cnn_workload_tb` | The full 36-class network as firmware on the whole system at default sizes. The weights are 63,654 deterministic multiples of 1/16. Every layer left in data memory is checked against a `real` reference, within 1e-4 of the sum of absolute values of the terms. Also checked: the image memory exactly, the predicted class, the UART character, LEDR, and the classification time (about 2.9 million cycles). It takes about 3.1 million cycles and roughly 40 s of simulation. |
| `fc_workload_tb` | The two simpler classifiers the network replaced, run as firmware in turn: a linear 784 x 36 classifier (28,224 weights) and a 784-64-36 network with ReLU (52,480 weights). Each run resets the system, takes its own snapshot and converts the 28 x 28 interior of the padded image. Every hidden value and score is checked against a reference. About 0.8 and 1.0 million cycles. |
| `image_recog_tb` | The whole system at its default sizes. It loads a firmware program and all 63,654 weights. It serves a test picture as the frame buffer, holds the pause key over one frame, and lets the firmware take a snapshot, convert it and compute 36 dot-product scores. It then checks the image memory, the scores (bit-exact, since the weights are small integers), the UART character and LEDR, and counts each mechanism: pause, compression start, 784 image writes, stalls, branches, stack use and camera pixels. About 1.8 million cycles. |

To change a size, override the parameters of `image_recog`:

- `IM_DEPTH`, `DM_DEPTH` and `STACK_DEPTH` (processor memories);
- `N_WEIGHTS` (weight memory);
- `CLKS_PER_BIT` (UART);
- `SENSOR_WIDTH` (camera line length for `raw2gray`).
