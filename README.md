# Real-time frame subtraction and averaging with a DRAM running sum

This is RTL for a streaming denoising kernel. It is meant for the FPGA inside a camera frame grabber.
A pump–probe imaging experiment records **G groups of N frames** each. Within a group, frames alternate
between "control" and "excited", so frames (1,2), (3,4), … form pairs. The quantity of interest is the
difference inside each pair, averaged over all groups:

    result[k][j] = ( Σ_{g=0}^{G-1} ( frame[g][2k+1][j] + offset − frame[g][2k][j] ) ) / G ,  k = 0 … N/2−1

Only N/2 result frames are sent to the host instead of G·N raw frames. The work happens while the camera
is still streaming, so each frame has to be finished before the next one arrives. In the reference setup
that is 57 µs, or 28 500 cycles of a 500 MHz (2 ns) clock.

The difficulty is storage, not arithmetic. Each of the N/2 averages needs data from every group. Its
partial result therefore has to survive until the last group arrives: N/2 frames of partial sums, about
20 MB for N = 1000 and 256 × 80 pixels. That is too much for block RAM, so the partial sums live in the
board's DRAM. The design is built so that DRAM latency never reaches the per-pixel path:

* A **running sum** per frame pair is kept in DRAM. The individual differences are never stored. Each
  DRAM word is read once and written once per group.
* A frame's running sum moves between DRAM and an on-chip **frame buffer** as a whole, in long AXI4
  bursts. The per-pixel loop only touches block RAM, at one beat (eight pixels) per cycle.

## Data format

The stream is 128 bits wide and carries eight 16-bit pixels per beat (12-bit mono pixels in 16-bit
containers). Lane *k* of a beat is pixel *k*. A 256 × 80 frame is 2560 beats. All pixel arithmetic
wraps modulo 2^16, as in the reference kernel.

The `offset` input is added before each subtraction so that differences stay non-negative. The host
subtracts it again afterwards; with end-of-run division, the output carries exactly `offset`.

## Block structure

```
 CustomLogic input stream ──► input_digest ──► pixel_sub_avg ──► send_output ──► output stream (to DMA)
  (128 b, sof/eof)           beat number,      │  ▲               sof/eof, frame
                             framing check     │  │               counter
                                               ▼  │
                                   AXI4 master (AR/R, AW/W/B) ──► board memory controller / DDR4
```

Inside `pixel_sub_avg`:

| part | file | role |
|---|---|---|
| frame/group counters, phase FSM, odd/even arbitration | `pixel_sub_avg.sv` | decides what each frame does |
| `prvFrame` buffer | `frame_bram.sv` | holds the first frame of the current pair |
| `sumFrame` buffer | `frame_bram.sv` | holds the running sum of the current pair |
| Sub / Add / Div | `subavg_alu.sv` | eight lanes, combinational |
| reciprocal of G | `recip_gen.sv` | computes ceil(2^32/G) once per configuration |
| burst read of a running sum | `axi_burst_reader.sv` | DRAM → sumFrame |
| burst write of a running sum | `axi_burst_writer.sv` | sumFrame → DRAM |

`denoise_pkg.sv` holds the beat, stream and AXI channel types. `denoise_top.sv` wires the three stages
together. The memory controller, the DDR4, the CoaXPress receiver and the DMA/PCIe engine belong to the
board and are not part of this RTL. Their sides of the connections are ports of `denoise_top`.

## What each frame does

Frames are counted from 0 inside a group (i = 0 … N−1), and groups from 0 (g = 0 … G−1). The pair index
is p = i/2.

| frame | group | phases | DRAM traffic | output |
|---|---|---|---|---|
| i even (first of pair) | any | PROC: store beats in prvFrame | none | none |
| i odd | g = 0 | PROC (sum starts at 0), WRITE | write pair p | none |
| i odd | 0 < g < G−1 | READ, PROC, WRITE | read + write pair p | none |
| i odd | g = G−1 | READ, PROC with division | read pair p | result frame p |

With G = 1 both DRAM phases drop out. Running sum p is stored at `cfg_base + p · FRAME_BEATS · 16` bytes,
so DRAM needs N/2 frames, whatever G is. The reader and the writer split a frame into INCR bursts of up
to 256 beats (4 KB). All burst addresses are issued at once, without waiting for data. With a 4 KB-aligned
base, no burst crosses a 4 KB page.

The phases of a frame run one after the other:

1. READ: the running sum is fetched into sumFrame.
2. PROC: the frame streams through at one beat per cycle. Each beat reads prvFrame and sumFrame at its
   beat number. One cycle later it writes the new sum back to sumFrame and, in the last group, hands a
   result beat to `send_output`.
3. WRITE: the sum is written back to DRAM.

The READ phase is started as soon as the previous frame is finished, before the new frame's first beat
has arrived.

### Timing at default size (2560 beats per frame, 2 ns clock)

These are measured in simulation, with a memory model that has a 4-cycle read latency and a 2-cycle write
response:

| frame kind | cycles | µs at 2 ns |
|---|---|---|
| first of a pair | 2562 | 5.12 |
| second of a pair, group 0 (PROC + WRITE) | 5128 | 10.26 |
| second of a pair, middle group (READ + PROC + WRITE) | 7694 | 15.39 |
| second of a pair, last group (READ + PROC) | 5128 | 10.26 |

The worst case is 27 % of the 57 µs frame period. A DRAM with longer latency adds roughly that latency
once per burst phase, because bursts are pipelined. The kernel stalls only when the DMA side stops
accepting results (`m_ready` low), and then it stops taking input beats too.

## Division and overflow

`cfg_spread` selects between two ways of dividing by G:

* **End division** (`cfg_spread = 0`). Each difference is added at full precision and the final sum is
  divided by G. This is exact, but the 16-bit sum overflows once G · (difference + offset) exceeds 65535.
  With 12-bit pixels and an offset of 4096, that happens above G = 8 for worst-case pixels. The wrap is
  silent.
* **Spread division** (`cfg_spread = 1`). Each difference is divided by G before it is added. The sum then
  stays within one pixel's range for any G. Each term is truncated separately, so the result can be up to
  G−1 counts below the end-division result.

Division never uses a divider in the pixel path. When the configuration is loaded, `recip_gen` computes
M = ceil(2^32 / G) with a 33-cycle restoring divider. Each lane then computes ⌊x·M / 2^32⌋. For x, G < 2^16
this equals ⌊x / G⌋ exactly, because the error x·(M·G − 2^32) stays below 2^32.

## Control interface

| signal | meaning |
|---|---|
| `cfg_load` | one-cycle pulse: latch the settings below, restart at frame 0 of group 0 |
| `cfg_groups` | G (16 bit; 0 is treated as 1) |
| `cfg_frames` | N, frames per group (16 bit, even) |
| `cfg_offset` | 16-bit offset added before subtraction |
| `cfg_spread` | 1 = spread division |
| `cfg_verify` | 1 = verification output (see below) |
| `cfg_base` | DRAM byte address of the running-sum area (4 KB aligned) |
| `cfg_ready` | high about 35 cycles after `cfg_load`, once 1/G is ready. No input is taken before that. |
| `phase`, `frame_idx`, `group_idx`, `frame_done` | progress |
| `frames_sent` | result frames delivered on the output stream |
| `len_err` | sticky: input sof/eof marks disagree with the beat count (cleared by `clr_err`) |
| `axi_err` | a DRAM transfer got a non-OKAY response or a misplaced RLAST |

The streams use valid/ready with `sof`/`eof` on the first and last beat of each frame. Framing is taken
from the beat count. The marks on the input are only checked against it. After the last result of an
experiment, the counters wrap to frame 0 of group 0, so the next experiment can start without a reload.

## Verification output

For bring-up it helps to see the raw frames next to the results. With `cfg_verify = 1` the kernel runs
G + 1 groups instead of G and sends every frame it receives:

* In groups 0 … G−1, each input frame is passed to the output unchanged. The running sums are computed
  as usual. Group G−1 writes its sums back to DRAM like a middle group, and nothing is divided.
* In the extra group G, each even frame is passed through as well; the host discards it. Each odd frame
  is replaced by result p. That result is made from the sum read back from DRAM, with the frame's own
  difference forced to zero, and divided as the mode requires.

So G = 2, N = 4 gives 12 output frames: 8 raw, then raw, result 0, raw, result 1. Passed-through
frames take one cycle more than a first-of-pair frame normally does (2563 instead of 2562). Frames in
group G−1 do a full READ + PROC + WRITE. DRAM traffic is G·N/2 frames each way, instead of (G−1)·N/2.

## Where this design departs from, or adds to, its source description

* The running sum of pair p has one DRAM slot that every group reuses. A literal reading of the source
  pseudocode indexes the slot by group as well, and reads a slot in the same group that writes it. That
  reading cannot work for a running sum.
* In group 0 the running sum starts at zero. The source pseudocode adds to the buffer without
  initialising it.
* By default only result frames are sent. The source names a debugging variant that returns averages
  interleaved with raw frames in an extra group, and shows its output. That variant is the verification
  output above. Which frames of the extra group carry the results, and that its other frames are its
  own input frames, are choices made here.
* The source lists a third frame buffer for output frames. Its result is already formed in the
  running-sum buffer, so that buffer is left out here: each result beat goes straight to `send_output`
  through a one-beat register. This saves 40 KB of block RAM. While the output stalls, the kernel
  stops taking input.
* The following were not specified and were chosen here:
  * the reciprocal-multiply division;
  * run-time G, N, offset and modes;
  * the framing check;
  * the 256-beat burst limit and the AXI data width (128 bit, equal to the stream);
  * valid/ready handshakes;
  * synchronous active-low reset.
* The two slower variants the design was compared against are not included: per-pixel DRAM writes, and
  burst writes with per-pixel reads.
* To handle two camera banks (256 × 160), instantiate the kernel once per bank. In the reference system
  each bank had its own board.

## Simulating

Each file has one module or package, and every testbench prints a `TB_RESULT checks=… failures=…` line.
With plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_denoise_top \
    rtl/denoise_pkg.sv rtl/*.sv tb/axi_mem_model.sv tb/denoise_env.sv tb/tb_denoise_top.sv
./obj_dir/Vtb_denoise_top
```

| testbench | what it runs |
|---|---|
| `tb_denoise_top` | whole kernel at 2 × 32-pixel frames and 4-beat bursts, with random stalls on input, output and AXI, and seven configurations: end and spread division, a 16-bit wrap, a single group, and verification output with both division modes. It also counts that every mechanism occurred. |
| `tb_denoise_full` | whole kernel at default parameters. Runs G = 8 and G = 10 (spread) and G = 5 (spread) with N = 1000, checks all 1.28 M result beats of each run, then runs G = 2, N = 4 with verification output and checks all 12 frames. It also checks per-frame cycle counts against 2570 / 7721 cycles and the 28 500-cycle frame period. It takes about 1.5 minutes. |
| `tb_pixel_sub_avg` | preprocessing module alone with a stalling DRAM model |
| `tb_axi_burst_reader`, `tb_axi_burst_writer` | burst splitting, data placement, and transfer time with and without stalls |
| `tb_subavg_alu` | random beats in both division modes, against true division |
| `tb_input_digest`, `tb_send_output`, `tb_frame_bram` | framing, back-pressure, and buffer latency |

`tb/axi_mem_model.sv` is a behavioural AXI4 slave standing in for the DRAM and its controller. It has a
configurable read latency and write-response latency, optional random stalls, and checks that bursts are
well formed. `tb/denoise_env.sv` is the shared end-to-end environment. It generates pixels from a hash of
(run, group, frame, pixel) and computes expected results from the same formula.

To change the frame size, set `IMG_H`/`IMG_W` on `denoise_top`. `IMG_H·IMG_W` must be a multiple of 8.
To change the burst length, set `BURST_LEN`; keep it at most 256 and a power of two.
