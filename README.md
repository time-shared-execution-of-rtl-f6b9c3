# A static region for time-shared vision pipelines on a partially reconfigurable FPGA

A realtime vision pipeline is a chain of streaming stages, such as blur, threshold, edge detection and tracking, fed by a camera and drained by a display. One way to run more pipelines than fit on the fabric at once is to share the fabric in time. Each pipeline owns the fabric for a timeslice. Its stages are loaded into reconfigurable partitions (RPs) by dynamic partial reconfiguration, and the next pipeline takes over at a frame boundary. Frames carry no state from one to the next, so nothing has to be saved when pipelines are switched.

The difficulty is reconfiguration time. Loading one RP takes milliseconds, and a 60 fps frame lasts only 16.7 ms. The framework around the RPs therefore hides, amortises or avoids reconfiguration in four ways:

* **Staggered start.** A pipeline's first stage starts as soon as it is loaded. Its output is parked in a DRAM ring while later stages are still being loaded.
* **Bundles.** The camera is double-buffered in DRAM in bundles of *g* frames. Each pipeline processes a whole bundle per timeslice, so one reload is paid for over *g* frames.
* **Downsampling.** Only every *s*-th camera frame is passed on, so a round may last *g·s* frame times.
* **Reuse through the interconnect.** A stream crossbar that software configures lets a pipeline reuse stages already loaded by the previous one. Stages can be deleted, inserted or reordered by rewriting a few registers instead of reloading a partition.

This RTL is the part of that system that never changes while the partitions are swapped: the *static region*. It holds:

* the crossbar;
* the camera path, with a frame downsampler;
* the display timing generator;
* five DMA engines that implement every DRAM streaming connection;
* an arbiter for the single DRAM port;
* the control registers through which the processor drives all of it.

The RPs, the vision modules, the processor software, the DRAM controller and the video PHYs lie outside this RTL. The top module exposes their connections as ports.

```
                 +----------------------- ts_top ------------------------+
 sensor pixels ->| camera_ctrl -> frame_downsampler -> src 20            |
                 |                                                       |
 RP r port p  <->| src/dst 2r+p        stream_xbar (26 x 26)             |
 (10 RPs x 2)    |                                                       |
                 | dst 20 -> display_ctrl ------------------------------> video out
                 | dst/src 21..25 <-> dma_engine[0..4] -> mem_arbiter ---> DRAM port
 AXI4-Lite ----->| ctrl_regs: routes, s, sizes, DMA config/commands/status |
                 +-------------------------------------------------------+
```

## Streams

Every connection carries a 16-bit pixel per beat, with AXI4-Stream style `valid` and `ready`. The beat type (`ts_pkg::beat_t`) has three fields:

* `data`: the pixel;
* `user`: set on the first pixel of a frame;
* `last`: set on the last pixel of a line.

All blocks agree on these markers. The camera controller creates them. The DMA engines regenerate them on replay from the programmed frame size. The display locks onto `user`.

## The crossbar (`stream_xbar`)

The crossbar has 26 endpoints on each side, numbered in `ts_pkg`:

| endpoints | sources | destinations |
|---|---|---|
| 0–19 | the two output ports of each RP (RP *r*, port *p* is 2*r*+*p*) | the input ports of each RP |
| 20 | the camera | the display |
| 21–25 | the read sides of DMA engines 0–4 | the write sides of DMA engines 0–4 |

**Routing.** Each destination has one register: an enable bit and a source number. A destination is a multiplexer followed by a single register slice. The path from any source to any destination is therefore one cycle long and fully pipelined.

**Ready.** The `ready` returned to a source is the ready of the destination's slice that selects it. Downstream stalls, such as a DMA engine waiting for DRAM or the display in blanking, reach the producer.

**Rules.**

* No two destinations may select the same source. An assertion checks this. A fork is the job of a duplicate module inside an RP.
* Two destinations selecting different sources is always legal, so a topology can be any set of disjoint chains.
* Disabling a route clears its slice. Software should change routes only while the affected streams are idle, meaning between timeslices.

**Departure from the paper.** The paper describes its crossbar two ways. One is a path with no flow control and no buffering. The other is a single-cycle buffered path with an AXI4-Stream interface. This design follows the second: it keeps back-pressure and uses one register stage.

## DRAM streaming connections (`dma_engine`)

One engine type covers every use of DRAM in the framework. Each engine has a write side (a crossbar destination) and a read side (a crossbar source). It has four modes:

* **RING.** A circular FIFO of `ring_words` words at `base`. The write side stores, and the read side replays in order. `level` counts the words held. When the ring is full the write side stops accepting, and `full_stalls` counts those cycles. This is the decoupling buffer for staggered start. Stage A can stream into the ring while stage B's partition is being rewritten. When B comes back, the ring drains into it at full rate.
* **FRAME.** A double buffer. Each bank holds *g* frames of `width × height` pixels.
  * The write side waits for a start of frame, then writes *g* frames into the bank that is not being read.
  * The read side replays the other bank's *g* frames once for each `rd_start` command. It can replay a bundle to each pipeline of a round in turn.
  * With `auto_swap` set, the banks swap the moment the write side finishes a bundle, and writing continues with the next bundle. This is the camera input buffer.
  * Without `auto_swap`, a write is started by `wr_start` and the banks swap only on the `swap` command. This is the output buffer, filled pipeline by pipeline and shown when the round is over.
* **LOOP.** Like FRAME, but the read side replays its bank again and again with no command. This is the display side of the output buffer: the last finished round keeps being shown until software swaps in the next one.
* **OFF.** Clears the engine.

**Split screen.** In the frame modes the write side stores only columns `col_lo` to `col_hi` of each line. Two pipelines in one round can each fill their own half of the same output bank. This is how the split-screen display of two time-shared pipelines is produced. Words outside the window are skipped, not written.

**Status.** Software reads, per engine:

* the read bank;
* the busy bits of the read and write sides;
* the frame counters of both sides;
* the ring level and the full-stall count.

The runtime manager polls the busy bits to learn when a pipeline has finished its bundle.

**Read side.** It keeps at most `RD_DEPTH` (8) words reserved: requests in flight plus words buffered. Because of that, a response always finds room, and back-pressure on the stream never blocks the memory port.

## Sharing the DRAM port (`mem_arbiter`)

Each engine has a write channel and a read channel, ten channels in all. A round-robin arbiter passes them to a single request port, one word per request.

* The channel number travels with the request as `id`.
* The memory returns read data in request order with the `id` echoed. The arbiter hands it to the right engine.
* The responses carry no back-pressure. The engines' credit scheme makes that safe.

This port stands in for the SoC's AXI HP ports and DRAM controller. The arbitration policy is this design's own choice.

## Camera side (`camera_ctrl`, `frame_downsampler`)

The camera controller takes an already decoded sensor pixel bus: a pixel strobe, the pixel, and a frame-start flag.

* It ignores everything before the first frame start.
* It counts columns against the programmed width to set `last`.
* It puts the pixels through a 16-entry FIFO, because a camera cannot be stalled. Pixels that find the FIFO full are lost and counted.

The downsampler forwards every *s*-th frame, starting with the first. It swallows the others while holding `ready` high so the camera keeps flowing, and counts the dropped frames. With *s* ≤ 1 it passes everything. Its decision is made at each frame start, and it adds no latency.

## Display side (`display_ctrl`)

The display controller is a raster generator. It defaults to 1080p60 CEA-861 timing: 2200 × 1125 total, sync widths of 44 and 5, positive syncs. It advances one pixel per `pix_ce`.

* In the active area it takes one beat per pixel.
* It locks only when a start-of-frame beat is waiting at the first pixel of its raster.
* When it is out of step, it discards beats until a start of frame reaches the head of the stream, and then waits for its own next frame.
* A missing beat in the active area shows as black and counts as an underrun.
* Losing lock at a frame start counts as a resync.

In the time-shared system the display is fed by a LOOP-mode engine. It is never starved unless the round-robin schedule overruns its quantum.

## Control registers (`ctrl_regs`)

The control registers are an AXI4-Lite slave with a 12-bit address, handling one transaction at a time. Read responses are OKAY.

| address | register |
|---|---|
| 0x000 + 4·d | route of destination *d*: bit 31 enable, low bits source number |
| 0x080 | downsampling factor *s* (reset 1) |
| 0x084 | camera frame size: height[27:16], width[11:0] (reset 1920×1080) |
| 0x088 | frames dropped by the downsampler [31:16], camera pixels lost [15:0] |
| 0x08C | display resyncs [31:16], underruns [15:0] |
| 0x100 + 0x40·e | DMA engine *e*, per-engine registers below |

Registers of DMA engine *e*, by offset:

| offset | register |
|---|---|
| +0x00 | CTRL: mode[1:0] (0 OFF, 1 RING, 2 FRAME, 3 LOOP), auto_swap[2]; writing bits 8, 9, 10 pulses rd_start, wr_start, swap |
| +0x04 | BASE: word address |
| +0x08 | RSIZE: ring size in words |
| +0x0C | DIM: height[27:16], width[11:0] |
| +0x10 | WIN: col_hi[27:16], col_lo[11:0] |
| +0x14 | G: frames per bank, 4 bits (0 is treated as 1) |
| +0x18 | STAT: rd_bank[2], wr_busy[1], rd_busy[0] |
| +0x1C | frames read [31:16], frames written [15:0] |
| +0x20 | ring level |
| +0x24 | ring full stalls |

## How a round is driven

The processor software, not modelled here, plays the runtime manager. `tb/tb_ts_top.sv` performs the same sequence and is the reference for it.

**One-time set-up.**

* Engine 0: camera buffer in FRAME mode with `auto_swap`.
* Engine 1: output buffer in LOOP mode.
* Route camera → engine 0, and engine 1 → display.
* Write *s* and *g*.

**Each round.**

1. Wait for engine 0's `rd_bank` to flip, which means a new bundle is ready.
2. For each pipeline:
   * route engine 0 → first stage → … → engine 1;
   * set engine 1's column window and pulse `wr_start`;
   * pulse `rd_start` on engine 0;
   * reload any partition whose module is missing. If a reload is needed, route the stage before it into a RING-mode engine, and from that engine into the partition being reloaded, so processing starts before the reload ends;
   * poll engine 1's `wr_busy` until the pipeline has written its bundle.
3. Pulse `swap` on engine 1 to show the round's output.

A switch between pipelines that share their loaded modules needs only crossbar writes.

## Simplifications against the prototype

* **One clock.** The prototype clocks the fabric at 200 MHz and the camera and display at 148.5 MHz. Here everything shares one clock, and the pixel rate is carried by `pix_valid` and `pix_ce`. There is no clock-domain-crossing FIFO.
* **One pixel per DRAM word, one request port.** At a 200 MHz clock this gives 200 M words/s. A 1080p60 DRAM connection needs one write and one read per active pixel, about 249 M words/s. So not even one full-rate DRAM connection fits, let alone the five that the prototype sustains through wide AXI HP bursts. Packing several pixels per memory word is the next step. The crossbar paths themselves (one pixel per clock) do keep up with 1080p60.
* **Two stream ports per RP.** The paper gives some RPs extra ports for forks and joins without saying which ones.
* **Not part of the RTL:** the RPs and their modules (which come from high-level synthesis), the ARM processor and its runtime manager, the configuration port, the DRAM controller, the HDMI transmitter and the sensor receiver. The testbenches use a behavioural partition (`tb/rp_model.sv`: out = 3·in + k, unavailable while reloading) and a behavioural memory (`tb/dram_model.sv`: fixed latency, random refusals).

## Verification

Each block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`.

* **`tb_stream_xbar`:** random routes and random back-pressure. Ordering and integrity are checked per route.
* **`tb_dma_engine`:** ring under back-pressure, bundle replay, split-screen window, loop mode, all against a stalling memory.
* **`tb_mem_arbiter`:** fairness and response routing.
* **`tb_frame_downsampler`:** *s* = 1, 2, 3, checking exactly which frames pass.
* **`tb_camera_ctrl`:** line markers, lock, latency, and the FIFO and its loss count.
* **`tb_display_ctrl`:** sync counts and widths, lock in mid-stream, pixel order, underruns.
* **`tb_ctrl_regs`:** every register, and the command pulses.
* **`tb_ts_top`:** the full time-sharing scheme on an 8×4 frame with *g* = 2 and *s* = 2.
  * Six rounds, two pipelines per round.
  * The first three rounds alternate a middle stage that must be reloaded while the first stage streams into a ring.
  * The last three switch by crossbar alone, deleting the middle stage.
  * Every displayed frame must be a split screen of the two pipelines on the same even-numbered camera frame.
  * Each mechanism must have occurred: downsampling, automatic bank swap, reload, ring stall, crossbar-only switch, output swap.
* **`tb_ts_top_full`:** the top at its default 1080p parameters. A single-stage pipeline runs camera → partition → DRAM ring → display. The pixel enable comes every third clock, to stay within the DRAM port's rate. The display must lock and show two complete 1920×1080 frames pixel for pixel. It simulates about 22 M cycles, roughly a minute with Verilator.

To run one of them with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/ts_pkg.sv tb/tb_ts_top.sv --top-module tb_ts_top
./obj_dir/Vtb_ts_top
```

## Known limits

* Route changes while a stream is mid-frame are not made safe by the hardware. Software must change routes between timeslices, as described above.
* If a round overruns its quantum *g·s·T_frame*, the camera buffer swaps under a pipeline that is still reading. Output frames then mix, as the prototype's behaviour also does. The engine raises no error for this.
* The display shows black on underrun rather than repeating the last frame.
* The DRAM bandwidth limit above means the full-size test uses one DRAM connection at a third of the clock rate. The multi-pipeline test runs at a reduced frame size.
