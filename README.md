# miniDAQ readout firmware for MDT front-end electronics

The front end of an ATLAS Monitored Drift Tube (MDT) chamber for the HL-LHC runs
*triggerless*. Every hit of every tube goes off the chamber: a TDC ASIC on each
mezzanine card digitises 24 tubes, and a Chamber Service Module (CSM) gathers up
to 18 TDCs onto two 10.24 Gbps lpGBT uplink fibres. A test stand cannot store
that stream (with two CSMs it is 40.96 Gbps). Most of it is idle characters and
noise anyway. The miniDAQ is a single FPGA board that stands in for the full
back end. It keeps only the hits that fall in a time window around a trigger from
a scintillator, packs them into events and sends the events to a PC over
gigabit Ethernet. It also configures the front end and monitors it through a
USB-UART link.

This repository holds synthesizable SystemVerilog for that firmware. It covers
everything between the decoded lpGBT frames and the Ethernet/UART byte streams,
plus self-checking testbenches. Transceivers, the lpGBT-FPGA codec, PHYs and the
analog trigger front end are outside the RTL; their signals are top-level ports.

## Contents

- [Data path at a glance](#data-path-at-a-glance)
- [One time base for hits and triggers](#one-time-base-for-hits-and-triggers)
- [From uplink frame to hit words](#from-uplink-frame-to-hit-words)
- [Keeping hits until the trigger asks: buffer, rejection, matching](#keeping-hits-until-the-trigger-asks-buffer-rejection-matching)
- [Trigger path](#trigger-path)
- [Events and Ethernet frames](#events-and-ethernet-frames)
- [Control: UART commands, registers, downlink](#control-uart-commands-registers-downlink)
- [Parameters and sizes](#parameters-and-sizes)
- [Where this design departs from or goes beyond the published description](#where-this-design-departs-from-or-goes-beyond-the-published-description)
- [Simulating](#simulating)
- [File map](#file-map)

## Data path at a glance

```
 4 x 230-bit frame / 25 ns (one per uplink; two uplinks per CSM)
   |
   v  uplink_readout (x4)
   |    uplink_demux -> 10 TDC slots (2 x 8 bits each) + 70-bit monitor field
   |    per slot: tdc_decode -> hit_buffer -> trigger_matcher -> matched FIFO
   |                                 ^ hold          ^ start, trigger time
   |                                 |               |
 trigger inputs (4 x 32 sub-bin samples / 25 ns)     |
   trig_coincidence -> fpga_tdc -> trig_delay -> trigger FIFO -> trigger_dispatch
                                                                    |  event id, time
                                                                    v
                                 event_builder <- header queue (sync_fifo)
                                      |  40-bit event words
                                      v
                                   eth_tx  -> GMII byte stream to the PHY

 UART rx/tx <-> ctrl_regs -> configuration (mask, delay, windows)
                          -> downlink_frame -> ENC byte, IC and EC bits to both CSMs
                          <- monitor fields, per-TDC hit counters, status, counters
```

Everything runs on one clock, `clk`, which is the 40 MHz lpGBT frame clock.
Each cycle is one bunch crossing (BC) of 25 ns. The real board has more clock
domains: the 320 MHz transceiver clock, the multi-phase trigger sampling clocks
and the 125 MHz Ethernet clock. Their crossings are not modelled here. See the
departures section.

## One time base for hits and triggers

The TDC ASIC stamps each leading edge with a 12-bit bunch counter and a 5-bit
fine time of 0.78125 ns (25 ns / 32). All times here use that 17-bit format:

    time[16:0] = {bunch count[11:0], fine[4:0]}     1 LSB = 0.78125 ns, wraps every 102.4 us

The trigger is stamped in the same format by `fpga_tdc`, so hit and trigger
times can be subtracted directly. The subtraction is modulo 2^17. Any
difference is read as a signed number in the matcher and as an unsigned age in
the rejection logic. This is valid as long as everything compared lies within
±51 us of each other, which the buffer sizes guarantee.

The firmware's bunch counter (`fpga_tdc.bc`) is cleared by the same
bunch-count-reset (BCR) command that goes to the front end over the downlink.
After a BCR, trigger times and TDC times agree up to a constant. That constant
is the transport latency of the front end, and the programmable match offset
absorbs it.

## From uplink frame to hit words

**Frame split (`uplink_demux`).** Each 230-bit frame holds 10 TDC slots of
16 bits plus a 70-bit monitor field:

| bits | content |
|---|---|
| `frame[16k+7 : 16k]` | slot k, even e-link (stream bits 0, 2, ..., 14) |
| `frame[16k+15 : 16k+8]` | slot k, odd e-link (stream bits 1, 3, ..., 15) |
| `frame[229:160]` | voltage/temperature monitor data (readable over UART) |

**Stream alignment (`tdc_decode`).** The TDC's serial output is split over two
320 Mbps e-links, one carrying the even bits and one the odd bits. The decoder
re-interleaves the two bytes into 16 consecutive stream bits, where
`even_byte[i]` is bit 2i. It then needs the 10-bit character boundary. The TDC
sends the K28.5 comma as its idle character. Until locked, the decoder searches
all 16 bit offsets of the new bits for either disparity form of K28.5. Once
locked, it cuts one or two 10-bit characters per frame from a 25-bit carry
buffer, since 16 bits arrive and 10 leave per character. It decodes them with
`dec8b10b`.

- Control characters (the idle comma) reset the byte assembler.
- Four data bytes, most significant first, form one 32-bit TDC word.
- A character outside the code drops the lock, discards the partial word and
  pulses `code_err`. Alignment is then searched again.

TDC word (triggerless mode) as used here:

| bits | 31:27 | 26:25 | 24:13 | 12:8 | 7:0 |
|---|---|---|---|---|---|
| field | channel | mode (dropped) | coarse (bunch count) | fine | pulse width |

Each decoded hit becomes a 30-bit `hit_t {chan, le_time, width}` and
increments a per-TDC hit counter. The counter gives real-time monitoring of
detector activity from the PC.

## Keeping hits until the trigger asks: buffer, rejection, matching

This is the core of the design and its least obvious part. Four
programmable numbers interact:

| register | default | meaning |
|---|---|---|
| trigger delay | 40 BC (1 us) | latency added to the trigger before matching starts |
| match offset | 64 bins (50 ns) | how far before the trigger the window opens |
| match window | 400 bins (312.5 ns) | window length |
| reject window | 8192 bins (6.4 us) | hits older than this are thrown away |

**Hit buffer (`hit_buffer`, one per TDC, 256 entries).** Hits enter in
arrival order. The TDC sends them in time order, so the head is the oldest hit.
While no trigger is being matched, a comparator checks the head every cycle.
If `now - head.le_time` exceeds the reject window, the head is dropped and
`rejected` pulses. `now` is `{bc, 5'b0}`.

- This drops at most one hit per cycle. That is far more than one TDC's hit
  rate.
- While the matcher owns the buffer (`hold`), rejection pauses.
- A write to a full buffer is lost and pulses `overflow`. A sticky status bit
  records it.

**Matcher (`trigger_matcher`, one per TDC).** On `start` it latches the
trigger time T and scans from the head. For each hit it computes
`d = le_time - T + offset`, read as a signed number:

- `d < 0`: the hit is earlier than the window. Pop and discard it, and pulse
  `early_drop`.
- `0 <= d < window`: the hit is in the window. Pop it and write it to the
  matched FIFO.
- `d >= window`: the hit is later than the window. Stop and leave it for the
  next trigger.
- An empty buffer also ends the scan.

The matcher then writes an end-of-trigger marker. This tells the event
builder that this TDC's share of the event is complete, even if it is empty.
The scan moves one hit per cycle and stalls while the matched FIFO is full.

**How to set the numbers.** Let the front end's transport latency (TDC → CSM →
fibre → decoded hit) be L. Matching starts about `delay + 4` BC after the
trigger edge. Two conditions must hold:

1. Every hit of the window must have arrived before matching starts:
   `(window - offset)/32 + L < delay + 4` (in BC).
2. The earliest hit of the window must still be in the buffer at that time:
   `(delay + 4)*32 + offset < reject window` (in bins). Otherwise rejection
   can remove it just before the matcher looks.

The defaults satisfy both with a large margin for L up to about 30 BC. The
buffer must hold all hits that arrive within the reject window. For a TDC with
24 tubes at 10 kHz each, that is 240 kHz × 6.4 us ≈ 2 hits, against 256
entries.

**Overlapping triggers.** A hit is popped by the first trigger that claims
it. If two trigger windows overlap, a hit in the overlap goes only to the
earlier event. A later hit that the TDC delivers out of time order (behind a
hit beyond the window) is not searched for; it will eventually be rejected.

## Trigger path

- **`trig_coincidence`.** Four comparator outputs, each sampled in 32 sub-bins
  per BC, are combined sub-bin by sub-bin. The result is the AND of the inputs
  enabled in the coincidence mask.
  - One enabled input passes an external coincidence straight through.
  - Two or more enabled inputs form the coincidence in the FPGA. The default
    mask is `0011`, i.e. two PMTs.
  - An all-zero mask disables triggering.
- **`fpga_tdc`.** Finds the first 0→1 step in the sub-bin samples of each BC.
  This includes a step from the previous BC's last sample. It outputs
  `{bc, sub-bin}` one cycle later, with at most one trigger per BC.
- **`trig_delay`.** A 256-stage shift register of {valid, time}. The tap is
  selected by the delay register. Output is `delay + 1` cycles after input.
- **Trigger FIFO (16 entries).** Absorbs trigger bursts while matchers are busy.
  If it is full, a trigger is lost and the sticky overflow status bit is set.
- **`trigger_dispatch`.** Starts all 40 matchers at once, and does so only when
  three things hold:
  - a trigger is queued;
  - every matcher is idle;
  - the event-header queue has room.

  It then pops the trigger and queues `{event id, trigger time}` for the event
  builder. After each start it waits one cycle, because matchers raise `busy`
  one cycle after `start`. Event ids are a 12-bit count from reset.

The dead time per trigger is therefore the longest matcher scan plus about three
cycles. Triggers arriving meanwhile wait in the FIFO; their time stamps are kept.

## Events and Ethernet frames

**`event_builder`.** For each queued header it emits a header word. It then
visits TDC 0 to 39 in order. For each TDC it copies matched hits until that
TDC's end-of-trigger marker, waiting if the FIFO is still empty. It closes with
a trailer:

| word | layout (40 bits) |
|---|---|
| header | `{4'hA, event id[11:0], 7'b0, trigger time[16:0]}` |
| hit | `{4'h1, tdc[5:0], channel[4:0], leading edge[16:0], width[7:0]}` |
| trailer | `{4'hC, event id[11:0], 12'b0, hit count[11:0]}` |

The TDC number is `uplink*10 + slot`. The drift time of a hit is
`(hit.le - header.time)` mod 2^17 bins, minus the fixed front-end latency that
the analysis calibrates.

**`eth_tx`.** This block collects one event, up to 296 words (1480 bytes), in a
frame buffer. It then sends a raw Ethernet II frame, one byte per clock on a
GMII-style `txd/tx_en` port:

| part | bytes |
|---|---|
| preamble | `55` ×7 |
| start-of-frame delimiter | `D5` |
| destination MAC | broadcast `FF:FF:FF:FF:FF:FF` |
| source MAC | `02:00:00:00:00:01` |
| EtherType | `88B5` (local experimental) |
| payload | each event word as 5 bytes, MSB first |
| padding | zero padding to 46 bytes |
| frame check sequence | CRC-32 (IEEE 802.3), least significant byte first |

Twelve idle byte times follow each frame as the inter-frame gap. An event longer
than 296 words continues in the next frame. While a frame is being sent the
builder is stalled (`in_ready` low); this is the back-pressure that fills the
matched FIFOs during bursts. A PC reads the frames with a raw socket or a
packet-capture filter on EtherType 0x88B5.

## Control: UART commands, registers, downlink

**Link.** 8N1 at 115200 baud (347 clocks per bit at 40 MHz). Two commands:

- Write: `'W'` (0x57), address, four data bytes MSB first. The reply is `'K'` (0x4B).
- Read: `'R'` (0x52), address. The reply is four data bytes MSB first.

Other command bytes are ignored.

| address | access | content |
|---|---|---|
| 0x00 | R | identifier `0x4D444151` ("MDAQ") |
| 0x01 | W | bit 0: send BCR, bit 1: send system reset |
| 0x02 | RW | coincidence mask [3:0] (reset `0011`) |
| 0x03 | RW | trigger delay [7:0] in BC (reset 40) |
| 0x04 | RW | match offset [16:0] in bins (reset 64) |
| 0x05 | RW | match window [16:0] in bins (reset 400) |
| 0x06 | RW | reject window [16:0] in bins (reset 8192) |
| 0x07 | RW | lpGBT IC word; writing it sends it down the IC field |
| 0x08 | RW | GBT-SCA EC word; writing it sends it down the EC field |
| 0x09 | R | status: [31:16] number of locked TDC links, [2] decode error seen, [1] buffer/trigger overflow seen, [0] downlink busy |
| 0x0A | R | triggers leaving the delay line |
| 0x0B | R | events sent to the Ethernet block |
| 0x0C | R | hits dropped by the reject window |
| 0x0D | R | hits discarded as earlier than a window |
| 0x0E | R | Ethernet frames sent |
| 0x10+3u+j | R | monitor field of uplink u, word j: j=0 bits 31:0, j=1 bits 63:32, j=2 bits 69:64 |
| 0x40+t | R | hit counter of TDC t |

**Downlink (`downlink_frame`).** The same frame goes to both CSMs every BC.

- `user[7:0]` carries the encoded control (ENC) command for one frame:
  - `B4` = bunch count reset;
  - `E1` = system reset;
  - `00` = idle.

  The CSM's fan-out FPGA forwards it to all TDCs. A BCR also clears the
  firmware's own bunch counter in the same cycle.
- The 2-bit IC and EC fields shift a loaded 32-bit word out MSB first, two bits
  per frame. This takes 16 frames. The fields idle at `11`.

EC feeds the GBT-SCA, whose JTAG master configures the mezzanine cards. IC
reaches the lpGBT's own control interface.

## Parameters and sizes

| parameter | default | where |
|---|---|---|
| `N_UPLINK` | 4 (2 CSMs × 2 fibres) | `minidaq_top` |
| `N_SLOT` | 10 TDCs per uplink | `minidaq_top`, `uplink_readout` |
| `N_CSM` | 2 downlink copies | `minidaq_top` |
| `HIT_DEPTH` | 256 hits per TDC | `uplink_readout` |
| `MATCH_DEPTH` | 64 words per TDC | `uplink_readout` |
| trigger FIFO, header queue | 16 each | `minidaq_top` |
| `MAX_DELAY` | 256 BC | `trig_delay` |
| `MAX_WORDS` | 296 words per frame | `eth_tx` |
| `CLKS_PER_BIT` | 347 | UART |

With 40 TDC slots the design covers the full target of 36 mezzanine cards
(18 per CSM), a whole sMDT chamber of 560 tubes (24 TDCs), and the 4-card,
96-tube cosmic-ray setup. The largest memory is the hit buffers: 40 × 256 × 30
bits. The whole design holds about 0.4 Mbit of memory, small against the
19 Mbit of block RAM in the Kintex UltraScale KU035 on the board. A generic
synthesis of the top gives about 22 k cells and 9.4 k flip-flops besides the
memories.

## Where this design departs from or goes beyond the published description

The system description gives the block structure and the principles: even/odd
e-link merge, 8b/10b decoding with idle removal, RAM buffering, trigger
matching against an FPGA-TDC time, rejection of outdated hits, coincidence in
the FPGA, delay shift register, trigger FIFO, ENC commands and configuration
over the downlink, UART control and Ethernet output. The following are this
design's own choices or simplifications:

- **Clocking.** A single 40 MHz domain.
  - The transceiver-side 320 MHz data path is outside the RTL. The RTL starts
    at the decoded 230-bit frame.
  - The multi-phase trigger sampler is outside too. The RTL starts at its 32
    samples per BC.
  - The Ethernet byte stream runs at one byte per 40 MHz cycle. A real board
    needs a FIFO into the 125 MHz GMII clock.
- **Bit layouts.** The bit layouts of the uplink frame slots, the monitor
  field, the TDC word, the event words, the register map, the UART protocol
  and the ENC codes are not given there and are chosen here.
- **Window width.** The match window is described as fixed; here it is a
  register, like the offset.
- **Coincidence gate.** The gate type is not specified; an AND of the enabled
  inputs is used. No other "programmed trigger logic" is built.
- **Configuration protocols.** The GBT-SCA HDLC protocol and the lpGBT IC
  protocol are not built. The IC/EC fields only carry raw 32-bit words. Wrapping
  them into those chips' frames is left to software or a future block, so the
  downlink block is incomplete in that respect.
- **Not in RTL.** The GTH transceivers, lpGBT-FPGA encoder/decoder IP, SFP+
  modules, comparators, clock manager, flash, JTAG debug core, Ethernet PHY,
  USB-UART bridge and the front-end boards are not in RTL. They are vendor IP,
  board parts or designs of their own.
- **Extras.** Counters for rejected, early-discarded and sent-frame totals and
  a status word were added for monitoring.
- **Time order.** The TDC is assumed to deliver hits in time order per chip.

## Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops, and each has a watchdog. They
use `$urandom` for stimulus. They work with a two-state simulator: every state
that is read is reset. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_minidaq_top -y tb \
    rtl/minidaq_pkg.sv tb/tb_util_pkg.sv rtl/*.sv tb/tb_minidaq_top.sv -o sim
./obj_dir/sim
```

Replace `tb_minidaq_top` by any `tb_<block>` to test a single block. The package
files must come first; `-y tb` finds the TDC stream model `tb/tdc_model.sv`.

`tb_minidaq_top` runs the full-size design with default parameters: 4 uplinks,
40 TDC models and the real UART bit time. It takes under a minute. The run:

- drives 40 behavioural TDC streams (`tdc_model`: 8b/10b, K28.5 idles, even/odd
  split) and a monitor pattern per uplink;
- fires scintillator pulses. Two-input coincidences trigger; single-input
  pulses are vetoed. A UART write then switches the mask to one input;
- puts early noise, in-window muon hits and late noise on random TDCs around
  each trigger;
- sends a burst of close triggers to back up the Ethernet output;
- issues a BCR and an EC configuration word, and checks both on the downlink;
- reads back the ID, monitor, hit-counter and drop/frame counters over the UART;
- parses every Ethernet frame, checks its CRC and compares every event word with
  the events predicted by the testbench.

It counts each mechanism and fails if any of them never happened:

- coincidence trigger;
- veto;
- single-input mode;
- matched hits;
- early discards;
- rejections;
- Ethernet stalls;
- BCR;
- EC word.

`tb_cosmic_run` replays the cosmic-ray test stand on the same full-size
design. Four mezzanine cards (96 tubes) sit on uplink 0 and a two-PMT
scintillator gives the trigger. The run has 60 muons, each firing 6 to 8 tubes
with 0 to 185 ns of drift, plus noise inside and outside the windows. Every
event is checked word by word, and every hit's time relative to the trigger
must fall inside the window. All out-of-window noise must be dropped, either by
rejection or as too early.

## File map

| file | role |
|---|---|
| `rtl/minidaq_pkg.sv` | time format, hit/match/config types, word tags, comma and ENC codes |
| `rtl/minidaq_top.sv` | top level |
| `rtl/uplink_readout.sv` | one uplink: demux + 10 × (decode, buffer, matcher, FIFO) |
| `rtl/uplink_demux.sv`, `rtl/tdc_decode.sv`, `rtl/dec8b10b.sv` | frame split and TDC stream decoding |
| `rtl/hit_buffer.sv`, `rtl/trigger_matcher.sv`, `rtl/sync_fifo.sv` | buffering and matching |
| `rtl/trig_coincidence.sv`, `rtl/fpga_tdc.sv`, `rtl/trig_delay.sv`, `rtl/trigger_dispatch.sv` | trigger path |
| `rtl/event_builder.sv`, `rtl/eth_tx.sv` | event output |
| `rtl/uart_rx.sv`, `rtl/uart_tx.sv`, `rtl/ctrl_regs.sv`, `rtl/downlink_frame.sv` | control and downlink |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_minidaq_top` and `tb_cosmic_run` |
| `tb/tdc_model.sv`, `tb/tb_util_pkg.sv` | TDC stream model; 8b/10b encoder, TDC word and CRC-32 helpers |
