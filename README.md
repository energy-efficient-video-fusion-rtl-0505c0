# Programmable-logic half of a CPU-FPGA visible/infrared video fusion system

Two cameras look at the same scene: an ordinary visible-light camera and a
long-wave infrared (thermal) camera. Each pair of frames is fused into one
picture that shows what either sensor sees. The fusion works in the wavelet
domain. Both frames go through a multi-level dual-tree complex wavelet
transform (DT-CWT). A fusion rule then picks, coefficient by coefficient, the
one with the larger magnitude. The inverse transform turns the fused
coefficients back into a picture.

The system runs on a device with a processor and an FPGA on one chip. The
processor runs Linux, the fusion rule and the transform's control flow (levels,
trees, rows, then columns). The FPGA does two things, and this RTL is that
FPGA side:

* **the wavelet hardware** (`wav_engine`): an accelerator that filters one
  image row (or one column, laid out as a row) per command. It runs the row
  filters of both the forward and the inverse transform. A command copies its
  input row out of shared memory with its own DMA. It filters the row at one
  sample pair per clock and copies the result back to memory.
* **the thermal camera capture path** (`camera_decode_wrapper`): decodes the
  camera's ITU-R BT.656 byte stream and scales each 720x243 field to 640x480.
  It keeps one whole frame until the processor has read it.

The top level is `fusion_pl_top`. It holds these two blocks and exposes
their bus ports: two AXI4-Lite slaves, one AXI4 master towards memory, the
camera pins, the scaler clock and a done interrupt. The processor, the memory,
the clock generator and the cameras are outside; the testbenches model them.

The main finding behind the system is about energy. Moving a row to the
accelerator costs a fixed overhead per command. Large frames therefore gain
from the FPGA, but small ones are faster on the processor's SIMD unit. This
RTL provides the accelerator side of that trade-off.

## 1. One row command

A DT-CWT level filters every row and then every column with a pair of 12-tap
filters and keeps every second output. The software arranges each row (or
column) as a contiguous run of 32-bit words in a memory area shared with the
FPGA. It adds 6 extension samples on each side. For `OUTWIDTH` = n the input
is `x[0 .. 2n+11]` and the hardware computes, for k = 0 .. n-1:

```
out[2k]   = ( sum_{j=0..11} A[j] * x[2k+j] ) >>> 16
out[2k+1] = ( sum_{j=0..11} B[j] * x[2k+j] ) >>> 16
```

It writes the 2n words `out[]` to the output area. `(A, B)` is the forward
bank (high-pass, low-pass analysis filters) or the inverse bank. The result
words interleave the two sub-bands. The software de-interleaves them when it
builds the next level.

**Inverse transform.** The inverse uses the same datapath with the second
coefficient bank. Synthesis (upsample by two, filter, add both branches) is
written here in polyphase form. The software interleaves the low-pass and
high-pass coefficients into one row. Each reconstructed even or odd sample is
then a 12-tap dot product over that row, with taps taken alternately from the
two synthesis filters. The software arranges those taps when it loads bank 2/3.
So an inverse command is, to the hardware, just the formula above with the
inverse bank.

**Numbers.** Samples and coefficients are signed 32-bit fixed point with 16
fractional bits (Q15.16). Each product is kept at 64 bits and the 12 products
are summed exactly. The sum is shifted right by 16 (rounding towards minus
infinity) and truncated to 32 bits. Pixels enter as `pixel << 16`.

**Command sequence** (what the driver does):

1. write `MEM_BASE` once (physical address of the shared area);
2. write the 48 coefficients to `COEFF[0..47]` and issue mode 1 (coefficient
   load) once;
3. per row: write `IN_OFF`, `OUT_OFF` (word offsets from `MEM_BASE`) and
   `OUTWIDTH`, then write `CTRL` with start and mode 2 (forward) or 3 (inverse);
   poll `STATUS.done` or wait for `wav_done`.

**Double buffering.** The driver splits its input and output memory into two
areas of 2048 words. It fills one area while the hardware works on the other,
and only changes `IN_OFF`/`OUT_OFF` between commands. The hardware needs
nothing else for this: each command carries its own offsets.

### Wavelet register map (AXI4-Lite, 12-bit byte address)

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x000 | CTRL | W | bit 0 start (self-clearing), bits 2:1 mode: 1 coefficient load, 2 forward, 3 inverse |
| 0x004 | STATUS | R | bit 0 done (sticky until the next start), bit 1 busy, bit 2 error (bad OUTWIDTH or memory SLVERR) |
| 0x008 | IN_OFF | R/W | input row offset, 32-bit words from MEM_BASE |
| 0x00C | OUT_OFF | R/W | output row offset, words |
| 0x010 | OUTWIDTH | R/W | output pairs n; 1 .. MAX_WIDTH/2 |
| 0x014 | MEM_BASE | R/W | byte address of the shared memory area |
| 0x018 | CYCLES | R | clock cycles taken by the last command |
| 0x100-0x1BC | COEFF[0..47] | R/W | staging registers: forward A (0-11), forward B (12-23), inverse A (24-35), inverse B (36-47) |

A start while busy is ignored. A write to an unmapped address is answered with
SLVERR. Byte strobes are honoured. A command with `OUTWIDTH` = 0 or
> MAX_WIDTH/2 finishes at once with `done` and `error` set and moves no data.

## 2. Inside the wavelet hardware

```
 AXI4-Lite --> wav_regs --(cmd, offsets, 48 coeffs)--> sequencer (wav_engine)
                                                          |
 AXI4 master <--> wav_memcpy <--> wav_in_buffer --pair--> wav_filter --pair--> wav_out_buffer
                       ^                                                             |
                       +-------------------------------------------------------------+
```

Each command runs three phases in strict order: copy in, filter, copy out.
The filter loop only starts when the whole input row is on chip, and the copy
out only starts when the loop is done. This follows the original
high-level-synthesis design, where the `memcpy` calls were not overlapped with
the loop. It is the overhead that makes small frames slow on the FPGA.

**The filter loop** (`wav_filter`) is where the arithmetic happens. It holds
a 12-sample shift register. Each clock it takes one input pair `(x[2i],
x[2i+1])`. It multiplies all 12 register taps by both coefficient vectors, and
it uses the register contents from *before* the new pair is shifted in. The
register then moves down by two and the pair enters at taps 10 and 11. The
first 6 iterations only fill the register. From iteration 6 on, each
iteration's products are exactly the window `x[2k .. 2k+11]`. So n+6 iterations
read 2n+12 words and yield n output pairs, one per clock (initiation
interval 1). The products are registered and then the sum is registered, so
outputs appear 2 cycles after their iteration.

**Row buffers.** `wav_in_buffer` holds MAX_WIDTH + 12 = 2060 words and
`wav_out_buffer` holds 2048. Each is split into an even bank and an odd bank by
the word address's low bit. The DMA side moves one word per clock. The filter
side moves a whole pair per clock, which is what lets the loop take two
samples per cycle from single-port-per-side memories.

**DMA** (`wav_memcpy`). This is an AXI4 master, 32 bits wide, with
incrementing bursts of up to 16 beats. No burst crosses a 4 KiB boundary. The
cache attributes (`ARCACHE`/`AWCACHE` = 1111) suit a cache-coherent accelerator
port, so the processor need not flush its caches around a command. Reads take
data whenever the memory offers it. Writes fetch ahead from the output buffer
through a 2-entry queue, so `WVALID` stays high through a burst even though
the buffer has a 1-cycle read latency. Any SLVERR/DECERR response ends the
command with the error flag.

**Timing of one command**, at 100 MHz, with no memory wait states:

* copy in: 2n+12 words, one word per cycle plus about 2 cycles per 16-word burst;
* filter: n + 6 iterations + 3 pipeline cycles (+3 cycles of hand-over);
* copy out: 2n words, likewise.

A 44-pair row (one row of an 88x72 frame) takes roughly 300 cycles. The fixed
part (about 30 cycles, plus the processor's register writes and polling over
the general-purpose port) does not shrink with the row. This is why the
processor's SIMD unit wins on small frames.

## 3. Thermal camera capture

```
thermal_clk domain           | sys_clk domain                          | aclk domain
bt656_decoder -> bt656_to_axis ==async FIFO==> video_scale -> output_fifo ==> axi_control_logic
                                                              (1 frame)       slave_register
                                                                              axi_ipif <-- AXI4-Lite
```

**Decoding** (`bt656_decoder`). The camera sends 8-bit bytes `Cb Y Cr Y ...`
at 27 MHz. Timing reference codes `FF 00 00 XY` mark the start (SAV) and end
(EAV) of active video. In `XY`, bit 6 is the field, bit 5 vertical blanking and
bit 4 horizontal blanking, and bits 3:0 protect them. A code whose protection
bits do not match is ignored and counted (`code_err`). Active bytes are paired
into 16-bit samples `{chroma, luma}`.

**Clock crossing** (`bt656_to_axis`). Each sample is held for one sample time.
This lets the bridge mark the last sample of a line (`last`, found when
horizontal blanking rises) and the first sample of a field (`user`). The
sample then goes through a Gray-code dual-clock FIFO (`async_fifo`) into the
scaler's clock domain as an AXI4-Stream. If the FIFO ever overflows, a sticky
`vid_error` is set.

**Scaling** (`video_scale`). Nearest-neighbour resampling from 720x243 to
640x480 uses two error accumulators (DDAs). Horizontally, input sample x is
kept when `floor((x+1)·640/720)` steps past `floor(x·640/720)`, which drops 1
sample in 9. Vertically, input line y is sent
`floor((y+1)·480/243) − floor(y·480/243)` times, 1 or 2. A line that must go
out twice is written to a one-line buffer as it passes. It is then replayed
while the input is held off (`s_ready` low). The BT.656 stream has more than
enough horizontal blanking to absorb the replay. The scaler accepts any
horizontal factor ≤ 1 and any vertical factor between 1 and 2.

**Frame store** (`output_fifo`). It stores the luma byte of one complete
640x480 frame (307,200 bytes). A frame is stored only if capture is enabled
and the previous frame has been read out completely. Otherwise the whole frame
is dropped and counted. A frame is never half-overwritten. The write and read
sides hand over ownership with a toggle pair, each side synchronising the
other's toggle through two flip-flops.

**Register interface.** `axi_ipif` turns AXI4-Lite accesses into one-hot chip
enables. `axi_control_logic` answers them; for a DATA read it pops one byte
from the frame store, has `slave_register` capture it, then acknowledges.
`slave_register` holds the control bit, the last pixel and a pixel counter.

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x0 | CTRL | R/W | bit 0 capture enable; a write also clears PIXCNT |
| 0x4 | STATUS | R | bit 0 a whole frame is waiting |
| 0x8 | DATA | R | next pixel (luma, bits 7:0); SLVERR if no frame is waiting |
| 0xC | PIXCNT | R | pixels read since the last CTRL write |

The processor polls STATUS and then reads 307,200 DATA words per frame. Each
DATA read takes about 8 clocks in the fabric, plus the bus latency of the
general-purpose port.

## 4. Clocks and resets

| Clock | Source | Used by |
|---|---|---|
| `aclk` | processor fabric clock (100 MHz) | wavelet hardware, camera register side, frame store read side |
| `thermal_clk` | camera byte clock (27 MHz) | decoder, write side of the clock-crossing FIFO |
| `sys_clk` | board clock generator | read side of that FIFO, scaler, frame store write side |

`aresetn` resets the bus side. `mclr` (active high) resets the capture path. It
is synchronised into each domain by `reset_sync`: asserted at once, released
on the domain's clock.

## 5. Parameters and sizes

| Parameter (top) | Default | Meaning |
|---|---|---|
| `MAX_WIDTH` | 2048 | longest input row in samples; OUTWIDTH ≤ MAX_WIDTH/2 |
| `IN_W`, `IN_H` | 720, 243 | camera active field |
| `OUT_W`, `OUT_H` | 640, 480 | scaled frame, frame store size |

Fixed in `fusion_pkg`: 12 taps, 32-bit data, 16 fractional bits, and the
register maps.

These frame sizes fit at the default parameters. The first five come from the
evaluation of the original system, each fused over 10 consecutive frames.

| Workload | Largest command | Fits |
|---|---|---|
| 88x72 frame | OUTWIDTH 44 (100 input words) | yes |
| 64x48, 40x40, 32x24 frames | OUTWIDTH 32 / 20 / 16 | yes |
| 35x35 frame (odd: software extends to 36) | OUTWIDTH 18 | yes |
| 2048-pixel row (widest the driver's buffer areas allow) | OUTWIDTH 1024, 2060 input words | yes, exactly |
| 720x243 field to 640x480 frame | 307,200-byte store | yes |

Yosys coarse synthesis of the top at the defaults reports about 5,600
flip-flop bits and 2.6 Mbit of memory. Nearly all of that memory is the
frame store, which needs block RAM (about 75 RAM36 tiles on a 7-series part).
The wavelet hardware alone has about 5,200 flip-flop bits, mainly the 96
coefficient registers and the products pipeline, plus 131 kbit of row
buffers. The original floating-point high-level-synthesis engine used far more
logic. This design's fixed-point arithmetic is the main reason for the
difference.

## 6. Where this design departs from the original system

Design choices where the original gives no detail:

* **Arithmetic and memory format**: the original kept rows in memory as
  32-bit floats and converted each sample to the loop's data type on the way
  in and back to float on the way out; its data type is not stated. Here the
  memory words are already Q15.16 fixed point, so no conversion hardware
  exists, and the software converts when it builds a row. The results are
  exact against the formula above but will not match a floating-point
  reference bit for bit.
* **Inverse transform**: only the forward loop was described. The inverse is
  the polyphase form on the same datapath (section 1). A design that
  implements the synthesis filter bank directly would have a different loop.
* **Register map, modes and status bits, the cycle counter and the error
  flag** are this design's own. The original only says that an AXI4-Lite port
  loads coefficients and issues commands in three modes.
* **On-chip buffers** are sized for one 2048-sample row, following the
  statement that the buffers suit images up to 2048 pixels wide. The 4096-word
  double buffer lives in the processor's memory, not on chip.
* **Camera path**: the block names (decoder, BT656-to-AXI-stream bridge,
  video_scale, output FIFO, AXI IPIF, AXI control logic, slave registers) and
  the rule "a new frame only after the previous one is taken" are from the
  original, and so are the 720x243 input and 640x480 output sizes of the
  scaler. Scaling by nearest neighbour, storing luma only, dropping whole
  frames while the store is full, the clock-crossing FIFO and the register
  map are this design's choices. The original capture path is documented only
  by its block diagram. Both fields of the interlaced camera signal are
  treated alike: each field becomes one 640x480 frame.
* **The frame store is read by the processor** over the camera's register
  port, one pixel per read, as the block diagram shows. There is no direct
  path from the frame store into the wavelet hardware: frames reach it through
  memory.

Not in this RTL: the processor system, the SIMD software, the Linux driver,
the memory, the board clock generator and the camera clock conditioning, and
the cameras. Their connections are ports of `fusion_pl_top`.

## 7. Verification and how to simulate

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself, with a watchdog against
hangs. Models used by several testbenches:

* `axil_master` is a processor register port. It drives on the falling edge
  and records handshakes on the rising edge.
* `axi_mem_model` is the shared memory: AXI4 slave, random wait states,
  SLVERR outside its range.
* `bt656_source` is a BT.656 camera. It can corrupt one timing code on
  request.

| Testbench | What it establishes |
|---|---|
| `tb_wav_filter` | formula above for three rows, with input gaps; 2-cycle latency |
| `tb_wav_in_buffer`, `tb_wav_out_buffer` | word/pair views of the banked buffers |
| `tb_wav_memcpy` | bursts ≤ 16, no 4 KiB crossing, wait states, SLVERR handling |
| `tb_wav_regs` | register map, byte strobes, start/done/busy, SLVERR on unmapped addresses |
| `tb_wav_engine` | coefficient load; forward and inverse rows in two ping-pong areas; filter phase = n+6+3(+3) cycles; refused OUTWIDTH |
| `tb_bt656_decoder` | pixels and blanking flags; bad protection bits ignored and counted |
| `tb_bt656_to_axis` | order, `user`/`last` across clocks with back-pressure; overflow flag |
| `tb_video_scale` | every output sample against the closed-form nearest-neighbour mapping |
| `tb_output_fifo` | disabled capture, store, drop while full, read-out, re-arm |
| `tb_axi_ipif`, `tb_axi_control_logic`, `tb_slave_register` | the camera register interface in pieces |
| `tb_bt656_top_level`, `tb_camera_decode_wrapper` | camera stream to scaled frame read-out |
| `tb_fusion_pl_top` | end to end at reduced sizes (see below) |
| `tb_fusion_full` | end to end with every parameter at its default |
| `tb_fusion_workloads` | one frame at each evaluated size (88x72 ... 32x24), one level, forward, fuse and inverse, at default parameters; reports cycles per size |

`tb_fusion_pl_top` plays the fusion software. It enables capture, loads the
coefficients, reads a scaled thermal frame and checks every pixel. Each row of
that frame is decomposed together with a synthetic visible row (forward mode).
The software keeps the larger-magnitude coefficients and reconstructs the row
(inverse mode). Each row uses the other pair of buffer areas. Every hardware
result is checked against the formula. The testbench counts, and requires at
least once: coefficient load, forward row, inverse row, memory wait states, a
burst split at 4 KiB, a refused command, a dropped frame, a refused DATA read,
and a corrupted BT.656 code. `tb_fusion_full` runs the same flow at full size.
It checks one complete 640x480 frame from a 720x243 field, fuses two 640-pixel
rows and processes one 2048-sample row. It takes about a minute under
Verilator.

`tb_fusion_workloads` prints, for one frame and one decomposition level, the
number of commands and the cycles they take. With the memory model's random
wait states, the hardware cycles per pixel fall from about 36 (32x24) to
about 31 (88x72). That is the fixed cost of each command being spread over
longer rows; a real processor port adds much more fixed cost per register
access than the testbench's bus model does.

To build and run a testbench with Verilator (5.x):

```
verilator --binary --timing -y rtl -y tb rtl/fusion_pkg.sv tb/tb_fusion_pl_top.sv \
          --top-module tb_fusion_pl_top
./obj_dir/Vtb_fusion_pl_top
```

Replace the testbench name for the others. Module and file names match, so
`-y` finds everything. Simulation is two-state friendly: every register the
logic reads is reset, and the testbenches initialise all their drivers.
