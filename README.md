# Ethernet front-end readout and nanosecond time stamping for a Cherenkov camera

An array of Cherenkov telescopes needs to know which showers were seen by
several telescopes at once. A classic stereo trigger does that in hardware: every
camera holds its event until a central box has answered. With fast cameras,
the round trip to that central box then sets the dead time. The readout scheme
by G. Hermann et al. ("A Trigger and Readout Scheme for future Cherenkov
Telescope Arrays") turns this around. Each camera keeps everything it triggers
on locally. It stamps every trigger with a time that all telescopes share to
about a nanosecond. The coincidence search then happens later, in software, on
the time stamps alone. Inside the camera, the front-end electronics are read out
over ordinary Gigabit Ethernet, without a custom bus.

This repository holds synthesizable SystemVerilog for the camera side of that
scheme:

* the **front-end FPGA** that serves a group of 16 pixels. It controls the
  digitisation, keeps a multi-event buffer, numbers the events and sends each
  one as a raw layer-2 Ethernet frame. Over the same full-duplex link it takes
  its settings.
* the **time-stamp node**. It runs a ~1 GHz counter that every 1 MHz central
  pulse resets, counts those pulses, and sends `{event number, microseconds,
  nanoseconds}` for every camera trigger over Ethernet.
* the **camera top** (`camera_readout`). It joins 120 such boards (1920
  pixels) and the node on one trigger line. Each has its own Ethernet link.

The Ethernet switch, the PHYs, the camera computer, the central trigger
computer, the analogue pipelines/ADCs and the central clock distribution are
not logic in this design. They sit at the ports.

```
   camera trigger ─────────┬─────────────────────┬──── ... ───┐
                           │                     │            │
  ADC/pipeline ─ adc_* ─ frontend_fpga[0]   frontend_fpga[1] ...   timestamp_node ── usec_pulse (central 1 MHz)
  (16 pixels)              │ GMII                │ GMII            │ GMII      └── clk_ns (~1 GHz local)
                           └──────────── to the Gbit switch / camera computer ──────────┘
```

## Time base: what a time stamp means

`timestamp_unit` runs on `clk_ns`, one count per nanosecond. It holds two
counters:

* `usec`: 48 bits, +1 on every rising edge of the central pulse;
* `nsec`: 16 bits, cleared on that edge and +1 on every other cycle. It
  saturates if the pulses stop.

On a rising edge of the camera trigger it captures `{usec, nsec}` and the
trigger's event number. Every telescope's counter is cleared by the same pulse,
so `usec*1000 + nsec` is a common time. Its error is the difference in pulse
propagation delay, which has to be calibrated separately (fibre length or
shower data; not part of this RTL).

Both inputs are asynchronous. Each passes a two-flop synchroniser and an edge
detector. Both see the same delay, so the captured `nsec` is the true distance
from pulse edge to trigger edge, ±1 count of sampling. The testbenches check
exactly that. `sync_ok` falls when no pulse has come within `NS_PER_PULSE +
NS_TOLERANCE` counts (1016 by default).

The capture register moves to the 125 MHz Ethernet domain by a toggle
handshake. A capture flips `rec_req`. The Ethernet side synchronises it,
copies the record (held stable meanwhile) into a 16-entry FIFO and returns the
toggle as `rec_ack`. Until `rec_ack` has come back (about 30–40 ns) a further
trigger is not stamped. Its event number is still used up, and it is counted
in the `missed` field of the next record. When the FIFO is full, records are
dropped and counted in `overflows`. That field travels in every time-stamp
frame as well.

For a 10 MHz central clock (the alternative the scheme mentions), set
`NS_PER_PULSE = 100`.

## Event numbers and dead time

Every board, and the time-stamp node, runs its own `event_counter` on the shared
trigger. Each trigger uses up one number whether or not it is taken, so the same
trigger has the same number everywhere. That number is what the camera
computer merges on. A board takes a trigger only when three things hold:

* its ADC controller is idle;
* the run is enabled (register 0, bit 0);
* its multi-event buffer has a free slot.

Otherwise the trigger is lost, `busy` is high, and the lost count goes up.
Every data frame carries the lost count as it stood when the event was taken.
So gaps in the event numbers, together with the lost counts, give each board's
dead time. The time-stamp node stamps every trigger, including those the
boards lose. This gives the system-wide dead-time record the scheme asks for.
The stamp also carries a busy flag: whether any board of the camera was busy
when the trigger came. That is the event-by-event busy record. The flag is
sampled through the same synchroniser as the trigger. A board raises busy for
a trigger only tens of ns after it, so the flag shows the state that earlier
triggers left.

Numbers start at 0 after reset. There is no separate count-reset line: all
boards must leave reset together.

## The front-end board data path

`frontend_fpga` runs on one 125 MHz clock:

1. **Trigger.** Two-flop synchroniser, edge detect, `event_counter`. The first
   `adc_req` comes 3 cycles after the trigger edge.
2. **Digitisation** (`adc_readout_ctrl`). For pixel 0..15 and sample 0..14 it
   holds `adc_req` with `adc_pixel`/`adc_sample` until the digitiser answers
   with a one-cycle `adc_ack` and `adc_data`. Each word goes to address
   `pixel*15 + sample` of the free buffer slot. After the last word the slot is
   committed with its header `{event number, lost count}`. That is 240 words
   (30 bytes per pixel). With a digitiser that answers in one cycle this takes
   480 cycles (3.84 µs). The same handshake serves an analogue pipeline with a
   slow ADC or an FADC with stored samples.
3. **Multi-event buffer** (`multi_event_buffer`). 16 slots of 256 16-bit
   words (64 kbit, block RAM with a registered read). There are write and read
   slot pointers and a fill count. `full` stops step 2 from taking triggers.
4. **Packetizer** (`event_packetizer`). It offers the oldest slot to the MAC
   and answers each payload byte request one cycle later. A byte comes either
   from the header or from the buffer word (high byte first). The slot is freed
   when the MAC has read the last byte.
5. **Transmit MAC** (`eth_tx_mac`). It sends preamble, SFD, destination MAC
   (a register), source MAC, EtherType 0x88B5, payload, padding, CRC-32 and
   the 12-byte gap on GMII. It runs as a two-stage pipeline: stage 0 picks the
   byte and issues the payload read, stage 1 merges the returned byte and
   updates the CRC. The outputs are registered, so `tx_en` rises 3 cycles
   after the MAC accepts a frame. The MAC never pauses inside a frame. This
   is why a payload source must have fixed one-cycle latency (see
   `frame_src_if`).

One event is a 522-byte frame on the wire: 8 preamble/SFD, 14 header, 496
payload, 4 FCS. With the gap and one idle cycle, back-to-back events leave
every 535 cycles (4.28 µs). A link thus carries up to 233 k events/s. At the
10 kHz camera rate the scheme assumes, that is 4 % of the link. Across 120
boards the camera produces 595 MByte/s of payload, the ~600 MByte/s the scheme
estimates for a 2000-pixel camera. Digitisation (3.84 µs with a fast ADC) is
a little quicker than transmission (4.28 µs), so under sustained high rates
the buffer fills and triggers are lost to `full`. At lower rates, triggers
are lost only while a board is digitising.

## Frame formats

All multi-byte fields are big-endian. Both frame types use EtherType
`0x88B5`. Control frames to the boards use `0x88B6`.

Event data frame (payload 496 bytes with the defaults):

| bytes | field |
|---|---|
| 0 | `0x01` (event) |
| 1 | format version `0x01` |
| 2–3 | board id |
| 4–7 | event number |
| 8–11 | triggers lost on this board before this event |
| 12 | pixels per board (16) |
| 13 | words per pixel (15) |
| 14–15 | zero |
| 16… | samples, pixel-major, 2 bytes each |

Time-stamp frame (payload 21 bytes, padded to 46):

| bytes | field |
|---|---|
| 0 | `0x02` (time stamp) |
| 1 | format version |
| 2–3 | node id (0x0100 in the top) |
| 4–7 | event number |
| 8–13 | microsecond pulses counted |
| 14–15 | nanoseconds since the last pulse |
| 16–17 | triggers not stamped so far (handshake window) |
| 18–19 | records dropped on FIFO overflow so far |
| 20 | flags: bit 0 set if the camera was busy when the trigger came |

Source MAC of board *i*: `02:43:54:00:ii:ii`, a locally administered address.
The node uses its node id in the same place. The destination starts as
broadcast and is set by control frames.

## Control over the data link

The links are full duplex, so the camera computer configures the front end
through the same cable. `eth_rx_mac` accepts a frame only when:

* it is addressed to the board's MAC or to broadcast;
* its EtherType is `0x88B6`;
* it is at least 64 bytes long;
* it has no `rx_er`;
* its CRC leaves the residue `0xDEBB20E3`.

A frame that fails any of these is only counted. From a good frame, the
first six payload bytes form one command: opcode `0x01` (write), register
address, 32-bit value. `config_regs`:

| reg | meaning | reset |
|---|---|---|
| 0 | bit 0: run enable | 1 |
| 1 | destination MAC [47:32] | 0xFFFF |
| 2 | destination MAC [31:0] | 0xFFFFFFFF |
| 3 | accepted writes (read-only) | 0 |
| 4–15 | settings for HV, trigger thresholds, digitisation (`settings[0..11]` ports) | 0 |

Unknown opcodes, addresses ≥ 16 and writes to register 3 are counted in
`cmd_errors`. Reading registers back over Ethernet is not implemented.

## Clocks, reset, ports

* `clk_eth` (125 MHz) drives every board and the Ethernet side of the node.
  `clk_ns` (~1 GHz) drives only `timestamp_unit`. The top assumes all boards
  share `clk_eth`. On real hardware each FPGA has its own oscillator, and
  nothing in a board depends on the others' clocks.
* `rst_n` is asynchronous and active low. It clears counters and pointers.
  The RAM contents are not cleared.
* `camera_readout` brings out, per board, the ADC handshake, GMII transmit and
  receive, the 12 settings words, `board_busy` and `lost_triggers`. It also has
  the node's GMII, `sync_ok`, `ts_overflows` and `camera_busy` (any board
  busy).

## Files

| file | contents |
|---|---|
| `rtl/cta_pkg.sv` | constants, frame and register layout, `timestamp_t`, CRC-32 function |
| `rtl/frame_src_if.sv` | payload-source ↔ MAC interface |
| `rtl/bit_sync.sv`, `rtl/sync_fifo.sv` | synchroniser, FIFO |
| `rtl/timestamp_unit.sv`, `rtl/timestamp_node.sv`, `rtl/ts_packetizer.sv` | time base and its Ethernet node |
| `rtl/event_counter.sv` | trigger numbering, lost count |
| `rtl/adc_readout_ctrl.sv`, `rtl/multi_event_buffer.sv`, `rtl/event_packetizer.sv` | board data path |
| `rtl/eth_tx_mac.sv`, `rtl/eth_rx_mac.sv`, `rtl/config_regs.sv` | Ethernet MACs, registers |
| `rtl/frontend_fpga.sv`, `rtl/camera_readout.sv` | board and camera tops |
| `tb/tb_*.sv` | one self-checking testbench per module, plus two camera-level ones |
| `tb/tb_util_pkg.sv`, `tb/adc_model.sv`, `tb/gmii_sink.sv`, `tb/camera_bench_body.svh` | reference CRC, frame builder, digitiser model, GMII receiver, camera-computer model |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/cta_pkg.sv tb/tb_util_pkg.sv tb/tb_frontend_fpga.sv --top-module tb_frontend_fpga
./obj_dir/Vtb_frontend_fpga
```

The testbenches:

* **`tb_camera_readout`** runs 4 boards with 2 buffer slots end to end. It
  merges fragments by event number the way the camera computer would. It
  checks every frame in full (CRC, header, all 240 samples against the
  digitiser model's formula) and every time stamp against the true trigger
  time. It also requires each mechanism to occur:
  * complete events;
  * losses while busy;
  * full buffers;
  * settings written over Ethernet;
  * corrupted control frames ignored;
  * triggers stamped although the boards lost them;
  * the busy flag set in those stamps (and clear for complete events);
  * time-stamp FIFO overflow;
  * the µs count advancing;
  * padded frames.
* **`tb_camera_full`** runs the camera at its default size: 120 boards of 16
  pixels with 16 slots each. It sends 7 triggers, of which 5 become complete
  events from all 120 boards and 2 are lost as busy but still stamped.
* The per-module testbenches check cycle counts where the design fixes them:
  * 3 cycles from trigger to `adc_req`;
  * `LAT+1` cycles per ADC word;
  * 3 cycles from MAC start to `tx_en`;
  * frames of `8+14+max(len,46)+4` bytes;
  * a gap of ≥ 12;
  * 535 cycles per event frame.

`tb_util_pkg::ref_fcs` is a bit-serial CRC written separately from the RTL's
byte-wise function. Both are checked against the standard check value
`CRC-32("123456789") = 0xCBF43926`.

## What follows the scheme and what is this design's

Taken from the scheme:

* the partition into front-end FPGAs with buffer and MAC, a time-stamp unit,
  and a switch feeding a camera computer;
* 16 pixels per FPGA and 120 Gigabit links (as printed in its readout
  figure);
* 30 bytes per pixel and event;
* a ~1 GHz local counter reset by a 1 MHz central pulse, with those pulses
  counted;
* capture of the time on every trigger;
* event counts made from the camera trigger on each FPGA;
* raw layer-2 Ethernet;
* control of the front end through the same link;
* time stamps also for triggers the front end could not take.
* a record, with every trigger, of whether the camera was busy.

The text allows 16 or 32 pixels per FPGA. Its figure shows 16, and 16 is the
default. 32 also works: set `NUM_PIXELS = 32` and `SLOT_WORDS = 512`, and the
payload grows to 976 bytes.

This design's own choices:

* every width;
* the buffer depth (16 events);
* the ADC handshake;
* the synchronisers and the clock-crossing handshake;
* the frame layouts, EtherTypes and MAC addresses;
* one frame per event and one per time stamp;
* the register map and command format;
* the loss/overflow accounting;
* the minimal MACs (standard IEEE 802.3 framing; no half duplex, pause
  frames, VLAN or read-back).

Not in this RTL:

* the analogue pipeline and ADCs (modelled in `tb/adc_model.sv`);
* the PHYs and the switch;
* the camera computer and its 1-second event buffer;
* the software coincidence trigger on the central computer;
* the central clock and its distribution;
* the calibration of pulse propagation times.

The scheme has the camera computer batch time stamps every 10–100 ms for the
central computer. Here the node sends one frame per trigger to the camera
computer. The batching is left to the camera computer's software.
