# Trigger and readout logic for a 2048-pixel Cherenkov camera

A Cherenkov flash from an air shower lasts a few to a few tens of
nanoseconds. The camera for which this logic is written records every one of
its 2048 pixels continuously at 1 GSa/s into an analogue ring memory inside
the sampling ASICs. Only when a camera-level trigger fires does it digitise a
short slice of that memory. The slice is nominally 96 ns long, and it must be
digitised before the ring, 4096 ns deep, writes over it. This RTL covers the
digital side of that chain:

* the backplane **trigger FPGA**, which forms the camera trigger from 512
  first-level trigger lines and tells the modules which time to read out;
* the **32 front-end module FPGAs**, which place the window in their ASICs'
  ring, read it, and pack it into event packets for the module's network link;
* the **camera time** that ties the two together: a nanosecond counter,
  restarted by the array-wide 1 PPS and copied into every module over the
  readout line.

The analogue front end, the ASICs, the network links and the timing board are
not part of the RTL. They appear as ports, and a behavioural model of the
sampling ASICs is used in simulation.

## Signal chain

```
 trigger ASICs (16 lines/module)        timing board: pps, ext_trig, cam_trig_out
          | trig_lines[511:0]                    |
          v                                      v
 +------------------------ trigger_fpga ------------------------+
 | camera_trigger --cam_trig--> readout queue --> readout_msg_tx |---> trig_pattern (to DAQ board)
 | cam_timer (ns, PPS) ------------^  PPS -> RESYNC request ----^ |
 +---------------------------------------------------|-----------+
                                                     | ser (one line, all modules)
              +--------------------------------------+------ ... x32
              v
 +----------------------- fee_fpga (module m) -----------------------+
 | readout_msg_rx --RESYNC--> cam_timer (module copy of camera time) |
 |   |--READOUT--> request queue --> fee_readout --> cell buffer     |
 |                                     |       \--> descriptors      |
 |            eth_* <-- fee_packer <-- cell buffer + descriptors     |
 +------------------------------------|------------------------------+
                                      v asic_rd_en / asic_rd_cell / asic_rd_data
                      4 sampling ASICs x 16 channels (outside the RTL)
```

Everything runs on one 125 MHz clock (8 ns per cycle), which the backplane
distributes to all modules. Reset is asynchronous and active low.

## Camera time and the storage ring

This is the part that has to be right for the data to mean anything.

**One time base.** `cam_timer` counts nanoseconds, adding 8 per cycle. The
cycle after a rising edge of `pps` reads 0. The sampling ASICs' write position
is locked to the same time: at 1 GSa/s the sample taken at camera time *t*
lies in storage cell `t mod 4096` until it is overwritten 4096 ns later. So a
time is an address, and no address translation table is needed.

**Copying the time into the modules.** On every PPS edge the trigger FPGA
queues a RESYNC message. The message carries the camera time of the cycle in
which the serial transmitter accepts it. The receiver delivers it exactly
`LINK_LAT_CYCLES = 52` cycles later. At that point the module loads its own
counter with `ns + (52+1)*8` (the +1 because the load takes effect in the
next cycle). From then on both counters tick from the same clock, so they stay
equal. Until the first RESYNC the module time is meaningless.

**Placing the window.** A READOUT message carries the trigger time `T`. The
module reads cells `(T - lookback) mod 4096` up to `W-1` cells later. Here `W`
is `cfg_blocks x 32`, nominally 96, and `lookback` is `cfg_lookback_ns`, with
1 ns resolution. The window may wrap past cell 4095.

**Is the window still there?** Reading takes one cycle (8 ns) per cell, while
the ring advances 8 cells per cycle. Cell *k* of the window is read `8(k+1)`
ns after acceptance, and it is overwritten `4096 - age + k` ns after
acceptance, where `age = now - start`. The window is therefore intact only if
`age + 7W + 1 < 4096`. If it is not, the module sends a header-only packet
with the *stale* flag, so the event numbering stays complete. The rule is
applied whenever a request is at the head of the queue, so a request that
waits too long for buffer room also turns stale instead of vanishing. With
the nominal window and empty queues, the trigger-to-capture delay of about
57 cycles (456 ns) leaves room for a look-back of up to about 2.9 us.

## Camera trigger (`camera_trigger`)

The first-level trigger lines are the discriminated analogue sums of four
pixels, 16 per module. They are treated as a square grid of patches. The
modules sit on a 6x6 grid with the four corner modules missing, which gives
exactly 32 modules. Each module is a 4x4 grid of patches, so the patch grid is
24x24 with four 4x4 corner holes. The line index is
`module*16 + row*4 + col`, with modules numbered row by row, skipping the
corners.

* **Coincidence window.** Each line starts a stretch counter and counts as
  active for `coinc_cycles + 1` cycles. Two lines whose edges are at most
  `coinc_cycles` cycles apart overlap.
* **Neighbours.** Two patches are neighbours when they share an edge, also
  across a module boundary. Diagonal patches are not neighbours. One AND gate
  per neighbouring pair is generated from the geometry parameters at
  elaboration.
* **Decision.** The trigger fires on the rising edge of "some neighbouring
  pair is active", so a long coincidence gives one trigger. It also fires on a
  rising edge of `ext_trig` when `ext_en` is set. The pattern of stretched
  lines is latched as `trig_pattern`.
* **Dead time.** The trigger FPGA holds one pending readout message. While
  that message waits for the serial line, new triggers are refused and
  reported on `trig_vetoed`. A message takes 52 cycles, so the camera accepts
  at most one trigger per about 416 ns in bursts.

Latency: trigger line in cycle *t*, `cam_trig_out` in cycle *t+2*. The trigger
time sent to the modules is the camera time of the `cam_trig_out` cycle. The
look-back setting absorbs the fixed offset to the light's arrival.

## Readout / re-sync line (`readout_msg_tx`, `readout_msg_rx`)

The line idles low. A frame is a `1` start bit followed by the 50-bit
`msg_t`, most significant bit first, one bit per clock:

| bits  | field      | meaning                                   |
|-------|------------|-------------------------------------------|
| 49:48 | `mtype`    | 1 = READOUT, 2 = RESYNC, others ignored   |
| 47:32 | `event_id` | event number (READOUT)                    |
| 31:0  | `ns`       | trigger time (READOUT) or send time (RESYNC) |

One line is broadcast to all 32 modules. READOUT has priority over a waiting
RESYNC. Frames are at least one idle cycle apart, so one frame occupies the
line for 52 cycles.

## Module readout and event packets (`fee_readout`, `fee_packer`, `event_fifo`, `fee_fpga`)

Capturing a window out of the ring must be fast (before it is overwritten);
sending it is slow (6150 words for a nominal event). The module FPGA therefore
splits the two, with three `event_fifo` queues between them:

1. **Request queue** (16 entries). Each READOUT message becomes a request
   `{event number, trigger time}`. Only if this queue is full is the request
   dropped, with a pulse on `drop_event`.
2. **Capture** (`fee_readout`). For the request at the head of the queue the
   controller applies the stale rule above. A stale request at once gives a
   descriptor with the stale flag. Otherwise it waits (`stall`) until the cell
   buffer has room for W cells and the descriptor queue has room. It then
   reads one cell of all 64 channels per cycle from the ASIC port
   (`asic_rd_cell`, data on `asic_rd_data` one cycle later), writes each cell
   into the **cell buffer** (1024 cells of 768 bits), and then writes the
   **event descriptor** `{stale, event, trigger time, start cell, W}` into the
   descriptor queue (16 entries). An event occupies the controller for W + 3
   cycles.
3. **Packing** (`fee_packer`). For each descriptor it sends the header, then
   the window cell by cell, taking one cell from the buffer per 64 words. It
   runs in parallel with the capture of later events.

Packet (`eth_tlast` marks the last word):

| word | content |
|------|---------|
| 0 | `{4'hC, 3'b000, stale, module_id[7:0]}` |
| 1 | event number |
| 2, 3 | trigger time [31:16], [15:0] |
| 4 | start cell (12 bits) |
| 5 | window length W in cells |
| 6 + k*64 + c | sample of channel c (asic*16 + ch, 0..63) in cell k of the window (oldest first), `{4'h0, adc[11:0]}` |

A nominal packet is 6 + 96x64 = 6150 words. The cell buffer holds ten nominal
windows, or four of the largest (8 blocks, 256 cells).

## Timing summary (nominal 96 ns window)

| step | cycles |
|------|--------|
| trigger lines -> `cam_trig_out` | 2 |
| readout message accepted -> module `msg_valid` | 52 |
| `msg_valid` -> first cell read (queues empty) | 2 |
| window capture, then descriptor | 96 + 2 |
| descriptor -> first packet word | 2 |
| packet output, one word per cycle when `eth_tready` is high | 6150 |
| highest sustained rate: output taking a word every cycle / every other cycle (1 Gbps) | ~20 kHz / ~10 kHz |

Bursts are a different matter from the average rate. At the highest trigger
rate, one per about 53 cycles, capture (99 cycles per event) falls behind and
the cell buffer fills after ten nominal events. In the 40-request burst of
`fee_fpga_tb` the first 10 events are read out in full, the next 22 turn stale
while they wait, and the last 8 are dropped. At 600 events/s the average gap
is 1.7 ms, so the queues are normally empty.

At 600 events/s a module sends 59 Mbit/s. That is well within a 1 Gbps
module link, and the whole camera's 1.9 Gbit/s fits a 10 Gbps uplink.

## How far it follows the published camera, and where it is its own

Taken from the published description of the camera:

* 512 trigger lines (32 modules x 16 patches) and the trigger by coincidence
  of two neighbouring patches;
* the external-trigger input, the camera-trigger output to the timing board,
  and the trigger-pattern output to the data-acquisition board;
* four 16-channel 12-bit sampling ASICs per module, sampling at 1 GSa/s into a
  4096 ns storage ring;
* a readout window placed with 1 ns resolution and sized in 32 ns blocks,
  96 ns nominal;
* the readout message sent to the modules on a camera trigger, and the serial
  readout / re-sync line;
* the 1 PPS re-sync of counters and sampling, and the 125 MHz backplane clock;
* the module FPGA reading out, packaging and buffering the data.

This design's own choices, which the description does not give:

* the module layout (6x6 minus corners) and the patch numbering;
* edge-sharing neighbours and the stretch-counter coincidence window;
* the one-deep readout message queue with trigger veto in the trigger FPGA;
* the message frame and its 52-cycle latency, and re-syncing the module
  counters by message;
* the one-cell-per-cycle parallel ASIC read port;
* the split into request queue, cell buffer, descriptor queue and packer,
  their depths, and dropping requests only when the request queue is full;
* the stale rule and header-only stale packets;
* the packet format;
* `MAX_BLOCKS = 8`.

Known departures and limits:

* The description calls the trigger decision nanosecond-accurate. Here the
  lines are sampled once per 8 ns cycle; finer timing would need the FPGA's
  serialiser inputs.
* The real sampling ASIC digitises the selected blocks with its own converters
  and a serial readout. The `asic_rd_*` port is an abstraction of that, and an
  adapter to the real ASIC protocol would sit between this port and the chip.
* Not built, because the description gives no logic for them:
  * ASIC configuration, slow-signal (DC level) readout and bias trimming;
  * the UDP/Ethernet stack;
  * the data-acquisition, timing, housekeeping and safety boards;
  * the LED flasher trigger.
* Configuration is by plain input ports, not registers behind a control link.

## Files

| file | content |
|------|---------|
| `rtl/chec_pkg.sv` | sizes, clock period, message, request and descriptor types, link latency |
| `rtl/camera_trigger.sv` | neighbour-coincidence camera trigger |
| `rtl/cam_timer.sv` | ns / seconds counter with PPS and load |
| `rtl/readout_msg_tx.sv`, `rtl/readout_msg_rx.sv` | serial readout / re-sync line |
| `rtl/trigger_fpga.sv` | backplane trigger FPGA |
| `rtl/fee_readout.sv` | window placement, stale rule, capture into the cell buffer |
| `rtl/fee_packer.sv` | event packet builder |
| `rtl/event_fifo.sv` | FIFO used as request queue, cell buffer and descriptor queue |
| `rtl/fee_fpga.sv` | one module FPGA |
| `rtl/chec_top.sv` | trigger FPGA + 32 module FPGAs |
| `tb/chec_tb_pkg.sv` | sample-value hash shared by model and checkers |
| `tb/targetc_model.sv` | behavioural model of a module's four sampling ASICs |
| `tb/*_tb.sv` | one self-checking testbench per module |

The geometry, channel counts and buffer sizes are module parameters with the
camera's values as defaults (`chec_top` has `MOD_ROWS`, `MOD_COLS`,
`PATCH_ROWS`, `PATCH_COLS`, `ASICS`, `CH`, `MAX_BLOCKS`, `CELL_DEPTH`;
`fee_fpga` also has `REQ_DEPTH` and `HDR_DEPTH`). The
storage depth, block size, ADC width and clock period are constants in
`chec_pkg`.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself, with
a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module chec_top_tb \
    -y rtl -y tb rtl/chec_pkg.sv tb/chec_tb_pkg.sv tb/chec_top_tb.sv -Mdir obj
obj/Vchec_top_tb
```

Replace `chec_top_tb` by any other testbench name.

`chec_top_tb` runs the whole camera at its default size, in about 10 s. Its
events are:

* a PPS and re-sync;
* a coincidence across a module boundary, whose window wraps past cell 4095;
* three triggers in quick succession: two read out in full, one vetoed;
* an external trigger;
* a stale window;
* an 8-block event;
* a burst of 34 one-block events with module 0's output held off. Module 0
  fills its descriptor queue and stalls; later requests wait until they are
  stale, and the ones that find the request queue full are dropped. Every
  other module reads out every event in full.

`chec_rate_tb` is the event-rate workload. It uses a camera of five
full-size modules (a 3x3 module grid minus corners) so that 35 ms of camera
time can be simulated in seconds. Triggers arrive at random (Poisson) times,
first at 600 events/s, then at 3000 events/s. Each module's output accepts a
word only every other cycle on average, which is the 1 Gbps module link. All
52 events are read out in full by every module, with no stale, dropped or
vetoed event and at most four packets waiting in a module.

`chec_top_tb` checks every word of every module's packets: header fields and all
64 x W samples, against values predicted from the ASIC model's hash of
(module, channel, absolute time). It also counts each mechanism and fails if
one never occurred. The unit testbenches check the blocks in isolation:

* `camera_trigger_tb`: the grid geometry against an independently built map,
  the coincidence window, latency, veto, and random patterns;
* `cam_timer_tb`: the timer, cycle by cycle;
* `readout_msg_tx_tb`, `readout_msg_rx_tb`: the serial frames, bit by bit;
* `event_fifo_tb`: the FIFO against a queue model;
* `fee_readout_tb`: window placement, wrap, clamping, the stale boundary to
  the nanosecond, stall on a full cell buffer or descriptor queue, a request
  turning stale while it waits, and timing;
* `fee_packer_tb`: packet words, order, last flag and pops, with random gaps
  on all three interfaces;
* `fee_fpga_tb`: the re-sync alignment, random output back-pressure, and a
  40-request burst (full, stale and dropped events, each accounted for);
* `trigger_fpga_tb`: message contents and priorities.

All of these pass. For each block, a version with one deliberate bug makes
its testbench fail. The design has not been tried against the real ASICs or
in an FPGA.
