# Event-camera stereo front end: polarity aggregation and level integration in hardware

Event cameras do not send frames. Each pixel reports on its own, with a
timestamp, when its brightness goes up (ON, +1) or down (OFF, -1). A stereo
pair therefore produces two asynchronous streams of `(t, x, y, polarity)`
events. Single events are too ambiguous to match between the two cameras. So
the events are first grouped in time, then integrated into a running "level"
image for each camera. A disparity search can then compare small windows of
the two level images, and it only has to do so at pixels that just changed.

This RTL implements the two hardware stages of that chain, as two kernels
linked by an on-chip channel:

```
 global memory                                              global memory
 (merged L+R camera events)                                 (level events, -1 end)
        |                                                            ^
        v                                                            |
  event_reader --> combined_aggregator ==ca2p==> combined_producer --> result_writer
                   [left frame][right frame]     [left frame][right frame]
        \__________ aggregator kernel _________/ \________ producer kernel ________/
```

The host, outside this RTL, merges the left and right camera streams into
packets in global memory. It starts both kernels with one pulse, and after
`done` it reads back the level events. The disparity search (sum of absolute
differences along the epipolar line) and the display run on the host. They
are not part of this RTL.

## The aggregation rule

For each camera, each pixel holds two values: an aggregated polarity `rpol`
and the timestamp `rtime` of its most recent event. An empty pixel holds
`rpol = 0` and `rtime = INT_MAX`. A camera event `(ts, x, y, pol, side)` is
handled in two steps.

1. **Deadline scan.** The threshold is `thr = ts - agg_time`. Every pixel of
   that camera's frame with `rtime < thr` has been quiet for longer than
   `agg_time`. Each such pixel leaves the block as an *aggregated event*
   `(rtime, x, y, rpol)` and is emptied.
2. **Store.** The event's pixel gets `rpol += ±1` and `rtime = ts`. An empty
   pixel has `rpol = 0`, so the same rule covers "first event at this pixel"
   and "more activity at this pixel".

So a burst at one pixel, for example +1, +1, -1, +1 in quick succession,
stays in the buffer while it continues. It leaves as a single event of value
+2 with the time of its last event. It leaves at the first event that arrives
more than `agg_time` after that last event. Pixels are released only when
some later event arrives; time alone does not release them. A pixel is
therefore held until the stream moves on. Pending pixels also survive the end
of a packet, and the next invocation continues with them.

Only the frame of the event's own camera is scanned. The scan comes before the
store. As a result, a stale pixel is released before a new event reuses it,
and is not merged with that event.

### How the scan is built

The scan touches every pixel of a frame for every event, so it sets the
throughput of the whole accelerator. Each frame row is stored as
`IMG_W/UNROLL` memory words of `UNROLL` pixels. By default `UNROLL = IMG_W`,
so one word holds a whole 320-pixel row. Both frames are held in one
single-port memory of `2*IMG_H*IMG_W/UNROLL` words: the left frame first, then
the right. The pixel fields are stored in two arrays, one for the polarities
and one for the timestamps.

For each word the block:

* reads it (1 cycle);
* compares all `UNROLL` timestamps with `thr` in parallel (1 cycle). If none
  fired, it goes straight on to the next word and writes nothing back;
* otherwise it emits the fired pixels, lowest `x` first, one per cycle while
  the channel accepts. It empties each pixel in its register copy of the word
  as it goes, then writes the word back (1 cycle).

After the last word it reads and rewrites the word of the event's own pixel
(2 cycles). The aggregated events of one camera event therefore come out in
row-major order. An event that releases nothing costs exactly
`2*IMG_H*IMG_W/UNROLL + 3` cycles, which is 483 cycles at the defaults. Each
released pixel adds one cycle, or more if the channel is full. Each word that
releases anything adds one write-back cycle. A smaller `UNROLL` trades
comparators for time linearly.

`initialize`, sampled with `start`, clears both frames at one word per cycle
(480 cycles at the defaults) before the first event is accepted. Use it on
the first invocation only. Frame contents are kept between invocations.

## Level integration

The producer keeps one level frame per camera: a signed 16-bit `L(x,y)` per
pixel, one pixel per memory word. For each aggregated event it performs
`L(x,y) <- L(x,y) + A(x,y)`. It then emits a level event with the new value,
together with the side, `x`, `y` and the timestamp it received. Every
aggregated event gives exactly one level event.

Each event takes one read-modify-write: accept, read, then write while the
result is offered. That is 3 cycles per event when the output is ready. With
`initialize`, both frames are cleared at one pixel per cycle
(`2*IMG_W*IMG_H` = 153,600 cycles at the defaults). While this runs, the
aggregator may already fill the channel and wait.

## Packets, end of packet and the channel

Both kernels handle one packet per invocation. A packet ends with a record
whose `eop` bit is set. The reader sends it after the last event. The
aggregator forwards it after finishing that event's scan. The producer passes
it on, and the writer turns it into the terminator `-1` in the output buffer.
It plays the role of the all-ones word that a software channel would carry,
but it travels in-band as a typed flag. A packet of zero events is legal: it
yields only the terminator.

`event_channel` is a plain synchronous FIFO with valid/ready on both sides.
Its depth is 8 by default and set by `CH_DEPTH` on the top. When the producer
side is slower, for example when many pixels of one row are released at once,
the FIFO fills. The aggregator then holds its current pixel until space frees
up. An assertion checks that a stalled writer keeps its data.

## Top level: `channels_accel_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of all control state |
| `start` | in | 1 | one-cycle pulse: invoke both kernels (sampled when idle) |
| `initialize` | in | 1 | with `start`: clear all four frames first |
| `in_base`, `in_size` | in | 32 | word address and number of events of the input packet |
| `agg_time` | in | 32 | inactivity deadline, in timestamp units, signed |
| `out_base` | in | 32 | word address of the output buffer |
| `busy` | out | 1 | from `start` until `done` |
| `done` | out | 1 | one-cycle pulse once the terminator has been written |
| `out_count` | out | 32 | number of level events written, valid at `done` |
| `rd_req_valid/ready`, `rd_addr` | out/in/out | 1/1/32 | read request; one outstanding |
| `rd_resp_valid`, `rd_resp_data` | in | 1/32 | read data, in order, any latency |
| `wr_valid/ready`, `wr_addr`, `wr_data` | out/in/out/out | 1/1/32/32 | word write |

Memory formats, in 32-bit words:

* **input**, 3 words per event: `ts`; `{y[15:0], x[15:0]}`; bit 0 polarity
  (1 = ON), bit 1 side (1 = right). Timestamps must not decrease, and `x`, `y`
  must lie inside the frame; an assertion in the aggregator checks the range.
* **output**, 4 words per event at `out_base + 4*i`: `ts`; `x`; `y`;
  `{15'b0, side, level[15:0]}`; then `-1` in word 0 of the next slot.

Parameters of the top, with their defaults: `IMG_W = 320`, `IMG_H = 240`,
`UNROLL = 320` (pixels compared per cycle) and `CH_DEPTH = 8`. The widths
shared by all blocks are in `evs_pkg`: 32-bit timestamps, 16-bit
coordinates, 8-bit aggregated polarity and 16-bit levels. At the defaults the
frame memories hold about 8.6 Mbit: 6.1 Mbit in the aggregator and 2.5 Mbit in
the producer.

## How far this follows the original design, and where it departs

Taken from the original design:

* the dataflow of camera → polarity aggregator → level producer → disparity,
  with the two aggregators merged into one kernel and the two producers into
  another;
* the two kernels joined by an on-chip channel, and the single end-of-packet
  marker;
* one pair of left/right frames in each kernel;
* the deadline rule `rtime < ts - agg_time` with `INT_MAX` as the empty mark;
* clearing the frames on an `initialize` argument;
* the fully unrolled inner scan loop;
* 3 input words per event;
* word 0 of each output event being its timestamp, and the `-1` terminator.

Choices of this design, made where the original is silent:

* **Ordering and scope of the scan.** The scan runs before the store, and it
  covers only the event's own camera frame.
* **Timestamp of an aggregated event.** It is the pixel's last timestamp. It
  is not the time at which the pixel was released.
* **Widths and layouts.** The field widths, the packing of the three input
  words and the four output words, and the channel depth are this design's
  own.
* **Reset, protocol and micro-architecture.** The reset behaviour, the
  valid/ready protocol, the cycle-level micro-architecture and the clearing of
  the producer frames on `initialize` are also this design's own.
* **Memory interface.** The reader keeps only one read outstanding. The
  aggregator's scan is far longer than the three reads of the next event, and
  the reader fetches those during the scan, so this costs nothing.

Not built: the disparity search, the display, the host-side merging of the
camera streams, and the PCIe/DDR board infrastructure. The earlier
single-kernel variants of the accelerator are not built either.

Performance context: the reference implementation of this two-kernel scheme
reported about 450 k events/s at the display, including host overhead. A bar
chart of the same result reads about 400 k events/s. At an assumed 200 MHz
clock this RTL handles up to about 410 k events/s per aggregator. A QVGA
sensor at 100 frames/s corresponds to 7.68 M events/s, so neither reaches real
time.

## Files

* `rtl/evs_pkg.sv`: event record types and widths.
* `rtl/event_reader.sv`, `rtl/combined_aggregator.sv`,
  `rtl/event_channel.sv`, `rtl/combined_producer.sv`,
  `rtl/result_writer.sv`: the blocks, each with a header describing timing
  and interface.
* `rtl/channels_accel_top.sv`: the top level.
* `tb/*_tb.sv`: one self-checking testbench per block. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/gmem_model.sv`: a global-memory model with optional random stalls.
* `tb/accel_tb_common.svh`: the reference model and packet runner shared by
  the three end-to-end tests.

## Verification

The block tests compare against models written independently with plain
per-pixel arrays. They cover:

* a +1 +1 −1 +1 burst that leaves as one +2;
* several pixels released from one word;
* back-pressure;
* reuse of a released pixel;
* `initialize`;
* the exact 19-cycle cost of an event on an 8×4 frame with 4-pixel words.

They also check FIFO order and fullness, memory stalls on both ports, the
output layout, and the producer's 3-cycle rate.

`channels_accel_top_tb` runs seven invocations on a 16×8 frame. It compares
every output word with the reference model. It counts each mechanism and
requires each to occur at least once:

* deadline releases;
* merging into an occupied pixel;
* multi-pixel words;
* full-channel stalls;
* memory stalls;
* pixels kept across invocations;
* pending pixels dropped by `initialize`;
* right-camera events.

`channels_accel_full_tb` does the same at the default 320×240 size, with
`initialize`. Its packets hold 200, 150, 1 and 40 events. It checks that an
event with nothing to release costs 483 cycles plus the fetch of its words.
It takes a few seconds.

`channels_accel_scene_tb` runs at the default size on a scene of the kind
the design is meant for. A bar moves in front of a fixed stereo pair and is
seen with a disparity of 12 pixels. Each edge pixel produces a burst of three
events per step. The test checks that the 2,400 bursty events leave the
aggregator as 800 events of ±3. It also checks that the level frames end with
the bar's edges in place. It measures 483.8 cycles per camera event, which is
about 413 k events/s at 200 MHz.

To simulate with Verilator, for example the full-size test:

```
verilator --binary --timing --assert --top-module channels_accel_full_tb \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/evs_pkg.sv tb/channels_accel_full_tb.sv
./obj_dir/Vchannels_accel_full_tb
```

Replace the top module and file name to run any other testbench. The
testbenches drive their inputs on the falling clock edge. They rely on every
register that is read being reset or written first, so any random
initialisation of the simulator may be used.
