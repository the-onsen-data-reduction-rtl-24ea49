# ONSEN: online ROI-based data reduction for the Belle II pixel detector (RTL)

The Belle II pixel detector (PXD) sits a few millimetres from the beam pipe. It produces more than
20 GB/s of zero-suppressed hits, almost all of them from low-momentum background. That is more
than ten times what the event builder can take. Only the outer tracking detectors can tell signal
from background. Tracks found there are extrapolated back to the pixel layers, and small
rectangular *regions of interest* (ROIs) are drawn around the intercepts. Two systems produce ROIs:

* **DATCON**, an FPGA track finder on the strip-detector data. Its answer comes within about
  10 µs, in event order.
* **HLT**, the high-level trigger PC farm. Its answer comes up to **5 s** after the hardware
  trigger, in arbitrary order. It also carries the software-trigger decision, which accepts
  about one event in three.

The ONSEN (*Online Selection Nodes*) system holds all pixel data in RAM until the HLT answers.
For a rejected event it throws the data away. For an accepted event it keeps only the hits that
lie inside one of the event's ROIs, which is about a tenth of the area. Together the two steps
reduce the data by a factor of about 30.

This repository holds synthesizable SystemVerilog for ONSEN's data-handling logic: the merger
card, the switch preselection and the selector cards, all joined into one top module
(`onsen_top`). It also holds self-checking testbenches for every block and for the whole system.

## System structure

```
DATCON ROIs --+                                        +-- carrier 0 switch -- selectors  0.. 3  (B1..B4)
              +-- merger node -- back-plane switch ----+-- carrier 1 switch -- selectors  4.. 7  (F1..F4)
HLT packets --+                  (preselection by      |   ...
                                  event mod 4)         +-- carrier 7 switch -- selectors 28..31  (F1..F4)

DHHC link s ---------------------------------------------------------------> selector s --> Event Builder 2
```

* The **detector is split into 8 sections**: 4 backward (B1–B4) and 4 forward (F1–F4), with
  5 half-ladders each. Each section's read-out controller (DHHC) deals its events round-robin over
  4 output links. Event 1, 5, 9, … of a section therefore goes to one link, event 2, 6, … to the
  next, and so on.
* That makes **32 links** and **32 selector cards**. A selector sees one section and one event
  group. Selectors sit in groups of four on 8 carrier boards. Carriers 2g and 2g+1 (the B and F
  halves) serve event group g. So two carriers hold complete events.
* **Event group g** consists of the events with `event mod 4 == (g+1) mod 4`. Group 0 is events
  1, 5, …; group 3 is events 4, 8, ….
* The **merger card** is the 33rd card. It buffers the DATCON ROIs and waits for the HLT. It then
  builds one combined ROI packet per event.
* The **back-plane switch** sends each packet only to the two carriers of its event group. This
  is the preselection. Each **carrier switch** then copies the packet to its four selectors.

Every card has its own RAM (4 GiB of DDR2 on the real hardware). Every card keeps a look-up
table that maps event number to the location of the buffered data.

## Life of an event

1. **PXD data arrive (µs after the trigger).** A subevent comes in on DHHC link *s*. Selector *s*
   writes all its words into its RAM ring buffer (`frame_writer`). It then records
   `{event, start address, length}` in its look-up table (`event_lut`).
2. **DATCON ROIs arrive (≈10 µs).** The merger stores the ROI frame in the same way, in its own
   RAM and table.
3. **HLT answer arrives (up to 5 s).** The packet carries the decision and zero or more ROIs.
   The merger (`roi_merger`) looks the event up and sends a header `{accept, event}`. For an
   accepted event, the header is followed by the HLT ROIs and then the DATCON ROIs, which it reads
   back from RAM. For a rejected event it sends the header alone. DATCON ROIs of a rejected event
   are never used.
4. **Distribution.** The back-plane `roi_switch` forwards the packet to the two carriers of the
   event's group. Each carrier `roi_switch` copies it to its four selectors.
5. **Selection.** The selector (`selector_core`) loads the ROIs into its `roi_filter` and looks
   up its buffered subevent.
   * For a rejected event it does nothing more. The data stay in the ring buffer and are later
     overwritten, so they are discarded.
   * For an accepted event it sends a header to Event Builder 2. It then reads the subevent back
     and passes every hit through the filter. Each hit inside at least one ROI is sent on. A
     trailer `{hits out, hits in}` closes the event.
   * An accepted event for which no pixel data were buffered still produces header and trailer,
     so the trigger information reaches the event builder.

The selector never waits for pixel data. It assumes the subevent is already in RAM when the ROIs
arrive, which is safe given the microseconds-versus-seconds latencies above.

## Frame formats

All links between blocks are streams of 64-bit words (`word_t`: `data`, `last`). They use a
valid/ready handshake: a word moves on a clock edge where both are high. The formats are this
design's own; the original firmware's formats are not public here.

| Frame | Word 0 (header) | Following words |
|---|---|---|
| PXD subevent (DHHC link) | `[63:32]` hit count, `[31:0]` event | two hits per word, low half first; an odd count leaves the high half of the last word unused |
| DATCON ROI frame | `[63:32]` ROI count, `[31:0]` event | one ROI per word in `[41:0]` |
| HLT packet / merged ROI packet | bit 32 accept, `[31:0]` event | one ROI per word in `[41:0]` |
| Output to Event Builder 2 | bit 32 = 1, `[31:0]` event | one hit per word in `[31:0]`, then trailer `[63:32]` hits out, `[31:0]` hits in |

`last` marks the final word of every frame.

* A hit (`pixel_t`, 32 bits) is `{sensor[5:0], row[9:0], col[7:0], adc[7:0]}`.
* An ROI (`roi_t`, 42 bits) is `{sensor, row_lo, row_hi, col_lo, col_hi}`. All bounds are
  inclusive.
* These widths cover 40 half-ladders of 768 × 250 pixels.

## Blocks

| Module | Role | Timing |
|---|---|---|
| `onsen_pkg` | shared types (`pixel_t`, `roi_t`, `word_t`, `mem_req_t`), widths, `inside_roi()` | – |
| `roi_filter` | ROI list (up to `MAX_ROIS`) and parallel rectangle match; forwards hits inside any ROI | 1 hit/clock, 1 cycle latency |
| `event_lut` | direct-mapped table event → {pointer, length}, tagged with the high event bits, self-clearing after reset | lookup result 1 cycle later; clears in 2^`LUT_AW` cycles |
| `frame_writer` | writes frames into the RAM ring buffer and registers them in the table | 1 word/clock |
| `frame_reader` | reads a frame back; credit-based, so the non-stallable RAM responses always fit its FIFO | 1 word/clock if RAM latency < `FIFO_DEPTH` |
| `mem_arbiter` | round-robin sharing of a card's RAM port between writer and reader | combinational grant |
| `roi_merger` | HLT + DATCON merge, accept/reject handling | 2 cycles lookup, then 1 word/clock |
| `roi_switch` | event-group routing (`GROUPS = 4`) or broadcast (`GROUPS = 1`), lock-step copies | 1 word/clock, 1 register stage |
| `selector_core` | per-event control of the selector: lookup, read-back, unpack, filter, header/trailer | 1 hit/clock when RAM and output keep up |
| `merger_node`, `selector_node` | one card each: writer + table + reader + arbiter + merger/core | – |
| `onsen_top` | 1 merger, 1 back-plane switch, 8 carrier switches, 32 selectors | – |

### The ROI filter

The filter is the part that does the actual reduction. It holds the event's ROI list in
registers, next to a bit vector of used entries. Each incoming hit is compared against all
`MAX_ROIS` rectangles at once: sensor equal, then row and column within their inclusive bounds.
Those are four magnitude comparisons per ROI. The result is OR-ed.

The ROIs from HLT and DATCON are just appended to the same list, so the selection is their union.
The publication gives no ROI count per event. If more than `MAX_ROIS` ROIs arrive, the filter sets
`overflow` and forwards every hit of that event. Keeping too much is preferred to losing signal
hits. The selector counts such events (`n_roi_overflow`).

### The look-up table and the ring buffer

Each event is stored as a contiguous run of words in a ring buffer that wraps at 2^29 words,
which is 4 GiB. The table is direct-mapped on the low 18 bits of the event number and keeps the
high 14 bits as a tag. A lookup hits only for the exact event number. An entry is overwritten by
the event 2^18 numbers later and is not freed on lookup. 2^18 entries are more than the
30 kHz × 5 s = 150,000 events that can wait for the HLT at once.

Neither the ring buffer nor the table guards against overrun. If the HLT answers later than the
buffer depth allows, old data are silently overwritten. The system is sized so that this does not
happen: 625 MB/s per link × 5 s = 3.1 GB.

The table is an on-chip array in this RTL. At full size (2^18 × 65 bits, about 17 Mbit per card)
it would not fit the block RAM of the FPGA the cards use. A hardware build would have to move it
into the DDR2 as well, or shrink `LUT_AW`.

### The RAM port

A card's RAM is reached through a simple port. Requests (`mem_req_t`: `we`, `addr`, `wdata`)
use valid/ready. Read data return in order, at least one cycle after the request, with no
back-pressure. This stands in for a DDR2 controller, which is not part of this design. The
reader issues a request only while its FIFO has room for every response still in flight.

## Parameters and their origin

| Parameter | Default | Where it comes from |
|---|---|---|
| `N_CARRIER`, `SEL_PER_CAR` | 8, 4 | published system: 32 selector cards on 8 carriers |
| `GROUPS` | 4 | published: each DHHC alternates over 4 links by event number |
| `MEM_AW` / `PTR_W` | 29 (64-bit words) | published: 4 GiB DDR2 per card |
| `LUT_AW` | 18 | derived: 30 kHz × 5 s = 150,000 events pending |
| `LEN_W` | 20 | own choice (average subevent ≈ 10,400 words) |
| `MAX_ROIS` | 64 | own choice, no published number |
| `FIFO_DEPTH` | 8 | own choice |
| field widths in `onsen_pkg` | see above | own choice covering the Belle II sensor geometry |

The published event-group mapping is:

* events 1, 5, … → carriers 0 and 1
* events 2, 6, … → carriers 2 and 3
* events 3, 7, … → carriers 4 and 5
* events 4, 8, … → carriers 6 and 7

The beam-test set-up ("Pocket ONSEN": one merger and one selector, no switch) is the same RTL
with `N_CARRIER = SEL_PER_CAR = GROUPS = 1`.

## What is taken from the publication and what is not

The publication describes the system's function and data flow:

* buffering in RAM plus a look-up table of pointer and event number, on both node types;
* read-back and merging of DATCON ROIs when the HLT answers;
* discarding rejected events regardless of DATCON ROIs;
* preselection of ROI packets by event number on the back plane;
* read-back, ROI filtering and sending to the event builder on the selectors;
* passing HLT-only events through in the output format.

It gives no internals. Everything at signal level is this design's own:

* frame and packet formats;
* the table organisation, clearing and tags;
* the ring-buffer policy;
* the RAM port and its arbitration;
* the ROI limit and its pass-all fallback;
* all timing.

Deliberate simplifications:

* **One clock domain, plain streams.** The 6.25 Gb/s optical links, the Gigabit Ethernet/UDP
  or SiTCP links to the HLT and to Event Builder 2, and the back-plane LVDS links are modelled as
  valid/ready streams. The serial transceivers, Ethernet MACs and transport-protocol cores are not
  included.
* **No DDR2 controller.** The RAM ports are brought out of `onsen_top`, one per card. The
  testbenches attach a behavioural memory model to them (`tb/ddr2_model.sv`).
* **No slow control.** The embedded CPU, its Linux and EPICS software and the register bus are
  not included. The blocks expose plain statistics counters instead.
* **The selector does not filter ROIs by its own sensors.** It loads every ROI of the event.
  ROIs on other sections' sensors simply never match, but they count towards `MAX_ROIS`.
* **Rejected events produce no output on the selectors.** The publication says their data are
  discarded. It does not say whether an empty record is sent.
* **The merger's own carrier board is one block.** The real system has a ninth carrier board.
  Its switch FPGA takes the merger's packets onto the back plane and does the preselection. Here
  that is the single `roi_switch` named `u_backplane`. Each of the eight selector carriers has
  its own `roi_switch` that broadcasts to its four cards.
* **Beam-test extras are left out.** The beam-test set-up also had a splitter node, which copied
  the PXD stream to a PC, and a sender node, which took over the selector's Ethernet output. Both
  were there only for testing and debugging, so neither is part of this design. The same holds
  for the detector-side DHH and DHHC boards that feed the selectors.

## Verification

Each testbench drives its block with random traffic and compares against an independent model
written in the testbench. It prints `TB_RESULT checks=N failures=M` and has a watchdog.
Concurrent assertions in the RTL check the stream rule at the outputs of the ROI filter, merger, switches and selector cores.
An offered word must
stay unchanged until it is taken. They also check that no RAM response is lost in the reader,
and that no request reaches a look-up table while it is still clearing. Simulate with
`--assert` so that they are active.

| Testbench | What it covers |
|---|---|
| `tb_roi_filter` | random ROI lists with stalls; empty list; 1 hit/clock with 1 cycle latency; overflow → pass-all; `pass_all` |
| `tb_event_lut` | clearing time; hits, misses, tag aliasing, replacement, lookup during a write |
| `tb_frame_writer` | addresses and contents in a wrapping 256-word buffer; table entries; blocking while the table clears |
| `tb_frame_reader` | random frames under RAM stalls and output back-pressure; address wrap; 200 words in ≤ 212 cycles |
| `tb_mem_arbiter` | correct muxing, no double grant, strict alternation under full load |
| `tb_roi_switch` | event-group routing on 8 outputs and broadcast on 4, under random back-pressure |
| `tb_roi_merger`, `tb_merger_node` | shuffled HLT answers, accept/reject, with and without DATCON ROIs |
| `tb_selector_core`, `tb_selector_node` | shuffled ROI packets, filtered hits, missing data, ROI overflow |
| `tb_onsen_top` | full system at the default sizes (32 selectors, 2^18-entry tables); every selector's output checked against a model of the whole chain; counts that each mechanism occurred (accept, reject, DATCON merge, missing subevent, ROI overflow, output back-pressure, RAM stall) |
| `tb_pocket_onsen` | beam-test set-up: HLT-only pass-through, then a noise run (3 % occupancy on a 64 × 480 sensor) with ROI tiles chosen by event number mod 16; reduction about ×16 |

To run one with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb rtl/onsen_pkg.sv \
          tb/tb_onsen_top.sv --top-module tb_onsen_top -Mdir obj
./obj/Vtb_onsen_top
```

The full-size run clears its 33 look-up tables (262,144 cycles) and then runs 24 events
through all 32 selectors, in a few seconds. The RTL also elaborates in Yosys with the slang front
end. At full size, the 33 look-up tables make `onsen_top` large to synthesize as a whole.

### How far to trust it

* The testbenches check the function described above against their own models. They do not
  check against real Belle II data formats, which this design does not reproduce.
* Throughput is checked only at block level (one word or hit per clock).
* No clock frequency or RAM bandwidth is assumed. Whether one card keeps up with 625 MB/s per
  link at 30 kHz depends on the clock and the DDR2 controller, both outside this design. One
  64-bit word per clock needs roughly 105 MHz for the writes plus the read-back of accepted
  events.

Lint warnings that remain are unused statistics outputs and `rst_n`, which is used both as an
asynchronous reset and in the assertions' `disable iff`.
