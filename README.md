# HOMI event-to-frame pipeline in SystemVerilog

An event camera does not send images. Each pixel reports on its own when its
brightness changes, and the sensor streams these reports as a compressed
word stream (Prophesee EVT 3.0). A convolutional network, on the other hand,
wants a dense, fixed-size tensor. This RTL is the hardware between the two.
It is the programmable-logic part of HOMI, an FPGA platform that pairs a
1280x720 IMX636 event sensor with a CNN accelerator. The RTL:

- decodes the EVT 3.0 stream at full sensor rate, including its 32-pixel
  vector words;
- maps every event from 1280x720 onto a 128x128 grid;
- accumulates the events into one of four representations: binary frame,
  histogram, shift-based linear time surface (SLTS) or shift-based
  exponential time surface (SETS). It keeps separate positive and negative
  polarity channels;
- closes a frame after a fixed number of events (constant-event mode) or a
  fixed number of clock cycles (constant-time mode);
- hands each frame, quantised to 8 bits, to the accelerator's global memory
  and starts an inference. At the same time it can stream raw events,
  frames and classifier results to the processing system over AXI4-Stream
  for DMA.

The accelerator itself (a sparse CNN engine), the MIPI CSI-2 receiver, the
sensor and the ARM processing system are not part of this RTL. They meet it
at the ports of `homi_top`.

## Dataflow and clock domains

```
 sensor stream (7.5 ns)          pre-processing (5 ns)                      accelerator (7.8 ns)
 s_axis_evt ─► input FIFO ─► EVT 3.0 decoder / control unit                     
                              │  x,y ─► address generation ─► addr               
                              │  t   ─► timestamp memory ─┐                      
                              ▼                           ▼                      
                       ping-pong buffers ◄──► ALU (pos) / ALU (neg)              
                              │ (buffer being transferred)                      
                       memory control unit ─► scale-shift ─► interface FIFO ─► loader ─► global memory, accel_en
                              │                                                         ◄─ accel_done, result
 m_axis ◄─ DMA packetizer ◄── display FIFO (one channel, pixel pairs)                          
            ▲    ▲ ◄──────────────────────────────────────── result FIFO ◄──────────────┘
            └ raw tap of the accepted sensor words
```

There are three clocks. The sensor side and the DMA run at 7.5 ns, the
pre-processing at 5 ns and the accelerator at 7.8 ns. The pre-processing
runs faster than the sensor side because a single 16-bit vector word can
carry up to 12 events. The decoder has to visit each of them before it takes
the next word, and the faster clock keeps the input FIFO from filling.

Every crossing goes through `async_fifo`: four FIFOs in total (input,
interface, display, result). Each has Gray-coded pointers, two-flop
synchronisers and a show-ahead read port. The design has no other
clock-domain crossing. The configuration inputs of `homi_top` are quasi-static
and belong to the domain that uses them:

- `pp_cfg` and the mapping-table port belong to 5 ns;
- `multi_channel` and `single_neg` belong to 7.8 ns;
- `tx_sel` belongs to 7.5 ns.

## Decoding EVT 3.0 (`evt3_decoder`)

The 16-bit EVT 3.0 words carry a 4-bit type in bits 15:12. This RTL uses the
word codes of the public format: Y address 0x0, X address 0x2, vector base X
0x3, 12-bit vector 0x4, 8-bit vector 0x5, time low 0x6, time high 0x8. Other
types are skipped. The 24-bit event time is {TIME_HIGH[11:0], TIME_LOW[11:0]},
counted in microseconds.

A vector is sent when several pixels of one 32-pixel group fire with the same
polarity:

- a base-X word gives the first column and the polarity;
- it is followed by bit masks of 12, 12 and 8 bits.

The decoder's sub-controllers visit only the set bits, lowest first. Each set
bit becomes one pixel event. After each mask the base X advances by 12 or 8.
Empty masks cost nothing beyond their fetch.

Each pixel event takes two 5 ns cycles, because the memories are read-first
block RAMs:

| cycle | what happens |
|---|---|
| 1 (`en_agen`) | x, y drive the address generator. The representation and timestamp memories are read at that address. |
| 2 (`wen_pos` or `wen_neg`) | The ALU result and the new timestamp are written back to the same address. |

A single X event therefore costs 2 cycles plus its fetch. A vector with all
32 bits set takes 66 cycles from its first write to its last: 32 events at
2 cycles each, plus 2 more where the sub-controller moves between masks.

The control flow is the flowchart's: IDLE, START, WAIT, one FOUND state per
word type, DONE_WRITE, the three vector WAIT/DONE pairs, DONE_FRAME_GEN and
HOLD_FIFO.

- **Empty input FIFO.** The controller parks in HOLD_FIFO (`fifo_hold`) and
  picks up the next word as soon as one arrives.
- **Frame end.** It is tested after each complete event or vector mask:
  - constant-event mode: the event counter reaches `threshold`. A frame can
    therefore exceed the threshold by at most the rest of one 12-bit mask.
  - constant-time mode: the cycle counter reaches `threshold` cycles of the
    5 ns clock, counted from the start of the frame.
- **Previous frame still transferring.** The controller waits in
  DONE_FRAME_GEN (`frame_stall`) before it issues the one-cycle
  `done_frame_gen`. No event is lost; the input FIFO absorbs the wait.

## From sensor coordinates to an address (`addr_gen_unit`)

Each axis has a table indexed by the input coordinate. An entry holds a slope
bit m and an offset b, and the output coordinate is `m ? in + b : b`. Because
m is 0 or 1, the "multiply" is a 2:1 multiplexer. The memory address is
`(y_out << 7) + x_out`.

By default the tables hold m = 0 and b[i] = floor(i·128/W) (W = 1280 or 720),
which is plain linear downsampling. So x_out = floor(x·128/1280) and
y_out = floor(y·128/720). The tables can be rewritten at run time through
`tbl_*`, for example to crop a 128x128 window with m = 1.

## Representations and the shift-based time surfaces (`rep_alu`)

There are two ALU instances, one per polarity. Each gets three inputs:

- the stored 16-bit value M of the pixel;
- the upper 8 bits of the event time, t_now = t[23:16];
- the upper 8 bits of the time of the pixel's previous event, t_past, taken
  from the timestamp memory.

Time surfaces normally need an exponential, or a subtraction scaled by a time
constant. Here both are replaced by shifts of the stored value. The shift
amount is

```
shift = t_now - t_past      if t_past <= t_now
        t_now               otherwise (the 24-bit time wrapped)
```

Using only the top 8 bits of the time divides it by 2^16 (about 65 ms). This
is the decay constant tau = 2^16/ln 2 of the exponential form. The updates
are:

| mode | new value |
|---|---|
| binary | 255 |
| histogram | M + 1, saturating at 0xFFFF |
| SETS | shift < 16 ? 1 + (M >> shift) : 1. Halving per 2^16 us approximates exp(-dt/tau). |
| SLTS | shift < M ? 1 + M - shift : 1. Linear decay. |

The timestamp memory is shared by the two polarities. It is written on every
event, with the full 24-bit time. Two status pulses make the corner cases
visible: `ts_wrap` (the stored time is later than the event's) and
`sets_reset` (a SETS update whose shift is 16 or more).

## Ping-pong buffers and the transfer (`pingpong_buffers`, `memory_control_unit`)

Each polarity has two 16384 x 16-bit buffers. While one buffer accumulates,
the other is read out. `mem_select` names the accumulating buffer:

- after reset, buffer 0 accumulates and buffer 1 is the transfer side;
- each `done_frame_gen` swaps them at once, so accumulation never stops.

The memory control unit then walks `transfer_addr` from 0 to 16383. Each
step is a single read-first access with `wen_mem_zero`: it reads the word out
and writes 0 in its place. The buffer is therefore clean when it becomes the
accumulating buffer again, and no separate clearing pass is needed.

One cycle after each read, the two values pass through the scale-shift unit,
out = min(255, (M·scale) >> shift). The resulting byte pair {neg, pos} is
written into the interface FIFO. The selected display channel goes to the
display FIFO. A small packer in front of that FIFO joins two consecutive
pixels into one 16-bit word. The reason is throughput. The transfer produces
one pixel every 5 ns, but the display FIFO is read in the 7.5 ns domain, one
word per cycle. With single pixels, the reader would fall behind, the FIFO
would fill, and every transfer would slow to 16384 x 7.5 ns, whether or not
frames are being sent to the DMA. With pairs, the reader keeps up.

If either FIFO is full, the unit stops issuing addresses (`mcu_fifo_hold`).
The word already read waits in a one-word holding register, because its
memory location has already been cleared.

An unstalled transfer takes 16384 + 2 cycles = 81.9 us. This is why the
constant-time mode is limited to about 12,200 frames per second: a shorter
period would start the next swap before the last transfer ends. In this RTL a
`done_frame_gen` is accepted only once the transfer is over, so a too-short
period stretches the frame (`frame_stall`) rather than corrupting it. The
same holds in constant-event mode for thresholds below the 16,384-event lower
bound.

## Loading the accelerator (`interface_unit`)

The interface FIFO (16384 words, 5 ns to 7.8 ns) can hold a whole frame.
Frames produced while an inference runs wait there.

The loader pops one word per 7.8 ns cycle and writes it into the
accelerator's global memory. It supports two layouts:

- `multi_channel = 1`: word i = {neg, pos} of pixel i, 16384 words. This is
  the 2x128x128 input.
- `multi_channel = 0`: one channel only (negative if `single_neg`), two
  pixels per word, pixel 2k in the low byte at address k, 8192 words.

After the last word the loader pulses `accel_en` for one cycle. It then waits
(`acc_wait`) until `accel_done`, and the result word is queued for the DMA.
This loader also sets the sustained frame rate into the accelerator. One
dual-channel frame takes 128 us to load, which allows at most about 7,800
frames per second before any inference time. Acquisition alone can run at up
to 12,200 frames per second in constant-time mode: in simulation, a
16,393-cycle period gives frames 16,395 cycles apart. At that rate the
interface FIFO absorbs the first two or three frames; after that the
transfer holds and the frame ends stall. The period then settles at 25,718
cycles (128.6 us), one loader pass plus the accelerator's latency. Frames
are stretched, not lost.

A dual-channel load takes 16384 x 7.8 ns = 0.128 ms from the first word; the
end-to-end test measures 127.8 us from `done_frame_gen` to `accel_en`. The
platform's own figure for this transfer latency is 0.142 ms, and the
difference is outside this RTL.

## Sending data to the processing system (`axi_dma_packetizer`)

The output multiplexer chooses among four sources with `tx_sel`: raw events,
frames, classifier results, or frames and results. The output is a 16-bit
AXI4-Stream:

- **raw events:** one sensor word per beat, `tlast` every 1024 words.
- **frames:** one packed pixel pair per beat (even pixel in the low byte),
  `tlast` at the end of the frame.
- **results:** a single beat with `tlast`.

`tuser` carries the source code.

Rules for switching sources:

- A source is switched only between packets.
- A frame packet begins only at pixel 0.
- Sources that are not selected are drained, so they never back up into the
  pipeline.

The raw tap cannot stall the sensor. A raw word that meets a busy output
register is dropped and counted in `raw_drops`.

## What is not built

These parts are left as ports of `homi_top`:

- the sensor;
- the MIPI CSI-2 receiver;
- the processing system with its DMA engine and DDR;
- the sparse CNN accelerator (global memory, activation sparsity engine,
  processing-element array, post-processing).

Their function is either outside the programmable logic or taken from
existing designs. The testbenches use `tb/raman_model.sv` in place of the
accelerator. It keeps a copy of the global memory and, after a fixed
latency, returns the 16-bit sum of that memory as its "class". This lets the
tests check that the right frame arrived. It does not run a network.

The 8-channel SETS input evaluated with the small network is not supported:
only the two polarity channels are generated, and how the eight channels are
formed is not described.

## Choices made here

These points are not fixed by the platform description; they are this
design's choices:

- EVT 3.0 word codes and bit positions, taken from the public format.
- Saturation of histogram and SETS values at 0xFFFF.
- The table contents and the run-time table-write port.
- FIFO depths: input 1024, interface 16384, display 1024 pixel pairs,
  result 16.
- Packing the display channel two pixels per word.
- The word formats of the interface FIFO and global memory, and the two
  load layouts.
- The DMA packet framing and the raw drop policy.
- The status outputs.
- The single-cycle read-and-clear transfer with its holding register.
- Refusing a frame end while a transfer is still running.
- Address mapping with m = 1 adds the integer coordinate. The platform
  describes Q16 coordinates shifted right by 16 before the add; the decoder
  here produces integer coordinates, so the shift is already applied.
- Resets are asynchronous and active low, one per clock domain; each should
  be released in step with its own clock. The memory
  arrays are initialised to zero and have no reset.

## Files

`rtl/` has one module or package per file:

| file | contents |
|---|---|
| `homi_pkg` | sizes, enums and the `pp_cfg_t` configuration struct |
| `async_fifo` | dual-clock FIFO |
| `bram_rf` | single-port read-first block RAM |
| `evt3_decoder` | decoder and control unit |
| `addr_gen_unit` | sensor-to-grid address mapping |
| `rep_alu` | per-polarity representation update |
| `pingpong_buffers` | the four representation memories and their multiplexers |
| `memory_control_unit` | swap, transfer and clear |
| `scale_shift_unit` | 16-bit to 8-bit quantisation |
| `preprocessing_block` | the 5 ns domain wired together |
| `interface_unit` | interface FIFO and accelerator loader |
| `axi_dma_packetizer` | output multiplexer and AXI4-Stream packetizer |
| `homi_top` | the whole design |

`tb/` has one self-checking testbench per block, `tb_<module>.sv`, plus:

- `tb_homi_workloads.sv`: two operating points of the platform run on the
  whole design;
- `homi_tb_pkg.sv`: an EVT 3.0 encoder and a reference frame model that
  applies the update rules event by event;
- `raman_model.sv`: the accelerator stand-in.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

## Verification

`tb_homi_top` runs the whole design at its default sizes, with the three
real clock periods, random stalls on the AXI4-Stream output and an
accelerator latency of 20000 cycles. It has three phases:

1. **SETS, 20,000-event frames, dual-channel layout, frames and results to
   the DMA.** Every global-memory word is compared with the reference model.
   So are every frame beat and every result. The load latency is checked.
2. **Histogram, 3000-event frames, negative channel only, raw events to the
   DMA.** The raw beats must be the accepted sensor words, in order, with
   drops counted.
3. **Binary frames in constant-time mode (25,000 cycles per frame).**
   - Every pixel is 0 or 255.
   - The set pixels are exactly the pixels that had events.
   - No frame is shorter than its period.

The test counts every mechanism and fails if one never happens:

- decoder holds on an empty FIFO;
- frame-end stalls;
- memory-control holds on a full FIFO;
- vector words;
- timestamp wraps;
- SETS resets;
- waits for the accelerator;
- back-pressure to the sensor;
- raw drops.

A typical run makes about 158,000 checks in a few seconds of simulation.

`tb_homi_workloads` runs two more operating points at default sizes:

- **The original 128x128 DVS Gesture geometry.** The mapping tables are
  rewritten to the identity map. SLTS frames of 16,384 events, the lower
  bound, are checked word by word against the reference model.
- **Constant-time mode at 12,200 frames per second.** The test checks three
  things:
  - the first frame periods are exact;
  - once the interface FIFO is full, the frame ends stall;
  - the steady period matches the loader's pace.

`tb_preprocessing_block` checks all four representations at full size
against the reference model, 8 frames in all. The block testbenches check:

- the ALU rules, with and without timestamp wrap, against the reference rule;
- the decoder's cycle timing (2 cycles per event, 66 per full vector) and
  its time-mode frame periods;
- the transfer's 16384 + 2 cycles and its holds;
- the FIFOs under unrelated clocks;
- the loader's two layouts;
- the packetizer's framing and drops.

Each testbench has been shown to fail on a deliberately broken copy of its
module.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb rtl/homi_pkg.sv tb/homi_tb_pkg.sv tb/tb_homi_top.sv \
  --top-module tb_homi_top
obj_dir/Vtb_homi_top
```

For a block testbench, replace the last file and `--top-module`. Omit
`tb/homi_tb_pkg.sv` for the testbenches that do not import it.

All parameters default to the platform's sizes. Some block testbenches
override sizes (memory and FIFO depths, frame and packet lengths) to keep
their runs short. `tb_homi_top` and `tb_preprocessing_block` use the
defaults throughout.
