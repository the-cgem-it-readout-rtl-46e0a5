# CGEM-IT readout chain: trigger-matched data selection in SystemVerilog

The CGEM-IT is a cylindrical triple-GEM inner tracker with about 10,000 strips.
The strips are read by 160 TIGER ASICs on 80 front-end boards (FEBs). Every
TIGER digitises each hit on its own and sends it out at once as a 64-bit word
with a 16-bit coarse timestamp. No trigger is involved at that point. The
experiment's L1 trigger comes 8.6 us after the collision and covers a 1.6 us
acceptance window.

The readout chain therefore has two jobs:

- keep every hit for longer than the trigger latency, in a form that can be
  searched quickly;
- once a trigger arrives, pull out only the hits whose timestamps fall inside
  its window, and build events from all boards that share one trigger number.

This repository holds synthesizable SystemVerilog for the digital part of
that chain:

- 22 GEM Read Out Cards (GEMROCs), each reading 4 FEBs (8 TIGERs, 16 serial
  data links);
- 2 GEM Data Concentrators (GEM-DCs), which build the events.

The blocks follow the published description of the system. Where that
description stops short (word layouts, handshakes, buffer depths, encodings),
the choice made here is stated in each file's opening comment and in the
section "What is this design's own" below.

## Data flow

```
 TIGER links (2 per TIGER, 332 Mb/s, 8b/10b)                   BESIII fast control
      |  x16 per GEMROC                                         L1, Check  |  ^ Full
      v                                                                    v  |
 tiger_link_rx ──> feb_input_fifo ──> latency_buffer ──┐          fcs_interface
   (per link)      (per FEB, merges    (per FEB, 16     │               | trigger queue
                    4 links)           pages x 32)      v               v
                          |                          tm_engine <────────┘
                          |  (TL mode)                  | TM packet
                          v                             ├──────────> UDP word stream (to MAC)
                     tl_packetizer ──> UDP word stream  v
                                                     dci_tx ── 8b/10b symbols ──┐
 asic_cfg_link x4: SPI-like TIGER configuration                                 |
 ─────────────────────────────── gemroc (x22) ──────────────────────────────────┘
                                                                                |
 gemdc_link_rx (per port, 11 used of 16) ──> gemdc_event_builder ──> VME read port + irq
 ─────────────────────────────── GEM-DC (x2) ───────────────────────────────────
```

Everything runs on one clock, the 166.6 MHz TIGER clock. That clock is four
times the 41.65 MHz BESIII clock, and the TIGERs count their coarse time on
it. The top level `cgem_readout_top` instantiates:

- 22 `gemroc`s;
- 2 sets of `gemdc_link_rx` + `gemdc_event_builder`.

GEMROC *g* drives input port *g* mod 11 of GEM-DC *g* / 11.

## Time, buckets and the trigger window

This is the heart of the design and the part most worth understanding before
changing anything.

**One time base.** Each GEMROC has a free-running 16-bit counter `now`. It is
assumed to be reset together with the TIGER coarse counters, so a hit's
`tcoarse` and `now` count the same clock. Every comparison is modulo 2^16.
The counter wraps every 393 us, far beyond any latency in the system.

**Buckets.** Each FEB has a `latency_buffer` of 16 pages of 32 locations.

- A hit goes to page `tcoarse[11:8]`. A page therefore collects the hits of
  2^8 clocks (1.54 us), and the buffer wraps after 16 pages (24.6 us).
- Within a page, hits are stored in arrival order at the next free location.
  A per-page fill count gives that location.
- A page is emptied (its fill count is cleared) at the moment `now` enters
  it again: `now[7:0] == 0` and `now[11:8] == page`. So a hit stays readable
  for between 23 and 24.6 us.
- A 33rd hit for one page is dropped. `overflow` pulses, and the trigger
  packet that follows reports it.

The expected background fills about 12 of the 32 locations.

**Trigger arrival.** `fcs_interface` passes the L1 line through a two-flop
synchroniser and treats the rising edge as the trigger. It:

- numbers the trigger (0, 1, 2, ...);
- stamps it with `now` at detection, which is the line's transition time plus
  2 clocks;
- queues it in an 8-entry trigger queue.

**Window.** For a trigger stamped `ts`, the window opens at
`ws = ts - l1_latency` and lasts `win_len` clocks. With the BESIII figures
these are 1433 and 267 clocks. A hit matches when
`(tcoarse - ws) mod 2^16 < win_len`. `l1_latency`, `win_len` and
`proc_delay` are run-time inputs, not parameters.

**Search.** `tm_engine` waits until `now - ts >= proc_delay`. This
programmable delay covers the time hits take to cross the TIGER links and
the input FIFOs; a hit arriving later than that is missed. The engine then:

1. Reads the pages from `ws[11:8]` to `(ws + win_len - 1)[11:8]`: two or
   three pages for a 267-clock window.
2. Within each page, visits every enabled FEB in turn.
3. Within each FEB, visits the filled locations of that page.

All FEBs share one read address, and each read takes 2 clocks (address, then
registered data). A matching hit leaves as one output word. A typical
trigger, with about 50 hits in the window, is processed in roughly 110
clocks (0.7 us).

## Packets and word formats

All words are 64 bits. The kind of a GEMROC/GEM-DC word is in bits [63:60].

| Word | Layout (MSB first) |
|---|---|
| TIGER word (after the receiver) | type[63:62] (00 -, 01 counter, 10 hit, 11 frame), TIGER id[61:59], reserved[58:54], payload[53:0] |
| hit payload (54 bits) | channel 6, TAC 2, tcoarse 16 ([45:30] of the word), ecoarse 10, tfine 10, efine 10 |
| TM header | 0x1, GEMROC id 5, 0 x7, trigger number 24, 0 x8, arrival stamp 16 |
| TM trailer | 0x2, GEMROC id 5, 0 x7, trigger number 24, hit count 12, status 12 |
| TM status bits [4:0] | trigger lost, Check error, link error, buffer overflow, hit count saturated |
| TL header | 0x3, GEMROC id 5, 0 x23, packet number 32 |
| TL trailer | 0x4, GEMROC id 5, 0 x7, word count 16, packet number 32 |
| event header | 0x5, 0 x12, trigger number 24, 0 x8, number of ports 16 |
| event trailer | 0x6, 0 x11, mismatch 1, trigger number 24, word count 16, 0 x8 |

Only hit words enter trigger-matched packets. Hit words begin with 0x8-0xB,
so the TM and event kind codes cannot be confused with them. In trigger-less
packets, counter words (0x4-0x7) do overlap the TL and event codes. A reader
must frame TL packets by the `last` flag (the UDP datagram boundary), not by
the kind field.

The TM packet carries the diagnostic flags that collected since the previous
trailer:

- TIGER link errors;
- latency-buffer or input-FIFO overflows;
- Check errors;
- triggers lost because the queue was full.

## Serial links

**TIGER data links** (`tiger_link_rx`). Each TIGER drives two 8b/10b links at
332 Mb/s, which is two line bits per 166.6 MHz clock (DDR).

- Words are sent as 8 data bytes, most significant byte first. K28.5 commas
  fill the gaps.
- The receiver searches both bit phases for a comma. It locks on the first
  comma and re-aligns on any comma found at a new phase.
- Symbols are decoded with running-disparity checking. A word containing a
  bad symbol is discarded and counted as a link error.
- The receiver writes its own TIGER number into bits [61:59].

One word takes 40 clocks on a link, so a TIGER can deliver 8.3 M words/s
over its two links.

**Optical link to the GEM-DC** (`dci_tx` / `gemdc_link_rx`).

- A packet is framed as K27.7 (start), 8 data bytes per word, then K29.7
  (end).
- K28.5 is the idle symbol, and also the filler when the next word is late.
- The transmitter sends one symbol whenever `sym_en` is high. The top ties
  `sym_en` high, giving 166.6 MB/s of payload. The paper's 2 Gb/s
  transceiver carries 200 MB/s; it is not modelled.
- The receiver holds one word back, so that the word before K29.7 can be
  flagged `last`.

**Shared 8b/10b tables.** `code8b10b_pkg` has both functions:

- `enc8b10b(byte, k, rd)` returns the 10-bit symbol (bit 9 goes on the line
  first) and the new running disparity.
- `dec8b10b(sym, rd)` returns the byte, the K flag, code and disparity
  errors, and the new disparity.

They follow the standard 5b/6b + 3b/4b code, including the alternate 3b/4b
forms and the K28.y rule.

**Configuration link** (`asic_cfg_link`). There is one per FEB, with one chip
select per TIGER.

- SPI mode 0, 32-bit frames.
- `sclk` = 166.6 MHz / 18 = 9.26 MHz, under the TIGER's 10 MHz limit.
- The reply is shifted in during the same frame and returned on
  `rsp_valid` / `rsp_data`.
- The TIGER register map is not part of this design.

## Fast control: L1, Check, Full

- **L1.** The line is high for 8 BESIII clocks (32 TIGER clocks). One rising
  edge is one trigger. A trigger that finds the 8-entry queue full is lost,
  but it still takes a trigger number, and the next trailer flags it.
- **Check.** BESIII pulses Check every 256 triggers. At each Check edge the
  GEMROC expects its trigger count to be a multiple of 256; otherwise it
  flags a Check error.
- **Full.** Each GEMROC raises Full while 6 or more triggers wait in its
  queue. Each GEM-DC raises Full while its event buffer is at least 3/4 full.
  The system Full line is the OR of all of these. BESIII stops sending L1
  triggers while it is high.

## Trigger-less mode

With `tl_mode = 1`, the latency buffers and the TM engine are idle.
`tl_packetizer` merges, round-robin, every word from the enabled TIGERs into
packets for the UDP stream. A packet closes when either:

- it holds 180 data words (180 x 8 B + header + trailer = 1456 B, under the
  1500 B limit); or
- eight TIGER frames (8 x 2^15 clocks, measured on `now`) have passed since
  it opened.

Data left over go into the next packet. A new packet opens as soon as the
previous one closes, so with no input at all a header/trailer pair still
goes out every eight frames. Switching modes is a level on `tl_mode`; it is
meant to be changed while no trigger is being processed.

## Event building in the GEM-DC

Each enabled port feeds a FIFO of 512 words. Building does not wait for
whole packets: as soon as every enabled port holds at least one word (the
header of its next packet), `gemdc_event_builder` starts writing into its
4096-word event buffer, so copying overlaps reception. If the port being
copied runs dry before its trailer, the copy simply waits for the next word.
The builder writes:

1. an event header carrying the first enabled port's trigger number;
2. one packet from each enabled port, in port order;
3. an event trailer with the word count, plus a mismatch flag if any packet
   carried another trigger number.

One word moves per clock while the event buffer has room. `irq` stays high
while a complete event waits. The VME side pops words with `rd_en`; the
buffer is first-word-fall-through. Each GEMROC produces exactly one TM packet
per accepted trigger. Ports therefore stay aligned as long as all GEMROCs see
the same triggers, which the mismatch flag checks.

## Parameters (defaults are the full system)

| Module | Parameter | Default | Origin |
|---|---|---|---|
| cgem_readout_top | N_GEMROC, N_GEMDC, GEMDC_PORTS | 22, 2, 16 | system description |
| cgem_readout_top | GEMROC_PER_DC | 11 | even split, this design |
| gemroc / tm_engine | N_FEB | 4 | four FEBs per GEMROC |
| latency_buffer | N_PAGES, PAGE_LOC, PAGE_CYC_W | 16, 32, 8 | 2^8-clock buckets of 32 locations, 24.6 us wrap |
| tl_packetizer | MAX_WORDS, FRAME_W, FRAMES_PKT | 180, 15, 8 | trigger-less packet rules |
| feb_input_fifo | NLINK, DEPTH | 4, 64 | depth is this design's |
| fcs_interface | Q_DEPTH, FULL_LEVEL | 8, 6 | this design |
| gemdc_event_builder | PORT_DEPTH, EVB_DEPTH | 512, 4096 | this design |
| asic_cfg_link | FRAME_W, HALF_DIV | 32, 9 | this design (9.26 MHz) |

Run-time inputs of the top: `l1_latency` (1433 for 8.6 us), `win_len`
(267 for 1.6 us), `proc_delay`, `tl_mode`, the per-TIGER enables, and the
GEM-DC port enables.

## What follows the paper and what is this design's own

**Taken from the paper:**

- the block structure of the GEMROC firmware: link receivers, rate-levelling
  FIFO per FEB, latency buffer per FEB, fast-control interface,
  trigger-matched and trigger-less processing, data-collector interface,
  configuration links;
- the bucket organisation (32 locations, 2^8 clocks, 24.6 us wrap);
- the search procedure: timestamp the trigger, wait a programmable delay,
  read the buckets around the window;
- header and trailer with the trigger number and status;
- the TL packet rules (8 frames or 180 words);
- the L1/Check/Full signals;
- the counts: 22 GEMROCs, 2 GEM-DCs with 16 ports, 8b/10b links;
- event building by common trigger number, with a VME interrupt.

**This design's choices:**

- all bit layouts above and the framing symbols;
- comma alignment, and dropping corrupted words;
- round-robin merging;
- FIFO and queue depths and the Full thresholds;
- the page-clearing rule;
- the scan order and its 2-clock read;
- the Check rule (count a multiple of 256);
- the GEM-DC builder (complete-packet counting, mismatch flag instead of
  resynchronisation);
- SPI mode and frame size;
- the GEMROC-to-port mapping.

**Departures worth knowing:**

- The paper gives two figures for the TIGER links: "four TX links" in the
  ASIC description, and two 332 Mb/s links per TIGER in the rate
  discussion. This design uses two links per TIGER (16 per GEMROC).
- The optical link carries at most one symbol per 166.6 MHz clock
  (166.6 MB/s), not the transceiver's 200 MB/s. That is still about 100 times
  the 1.6 MB/s a GEMROC needs.
- The TIGER's own digital back-end is not modelled. The test benches use a
  behavioural link model (`tb/tiger_tx_model.sv`) that sends words in the
  format assumed here.
- These parts are not built and appear as ports instead:
  - the Ethernet MAC (UDP payload stream out);
  - the NIOS-II processor (configuration commands in);
  - the PLL (one clock input);
  - the optical transceivers (symbols wired straight through);
  - the VME interface (event-buffer read port and interrupt);
  - power control.

## Simulating

Each block has a self-checking test bench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5, for example:

```
verilator --binary --timing -Irtl -Itb rtl/cgem_pkg.sv rtl/code8b10b_pkg.sv \
    rtl/sync_fifo.sv rtl/tiger_link_rx.sv rtl/feb_input_fifo.sv rtl/latency_buffer.sv \
    rtl/fcs_interface.sv rtl/tm_engine.sv rtl/tl_packetizer.sv rtl/dci_tx.sv \
    rtl/asic_cfg_link.sv rtl/gemdc_link_rx.sv rtl/gemdc_event_builder.sv rtl/gemroc.sv \
    rtl/cgem_readout_top.sv tb/tiger_tx_model.sv tb/tb_cgem_readout_top.sv \
    --top-module tb_cgem_readout_top -o sim && obj_dir/sim
```

| Test bench | What it exercises |
|---|---|
| tb_tiger_link_rx | comma lock at both bit phases, words every 40 clocks, corrupted symbols |
| tb_feb_input_fifo | 4-link merge, order per link, back-pressure, drop |
| tb_latency_buffer | page addressing, fill counts, page reuse, 33rd-hit overflow |
| tb_fcs_interface | trigger numbering and stamps, queue, Full, lost trigger, Check |
| tb_tm_engine | window selection incl. both window edges, disabled FEB, delay, header/trailer |
| tb_tl_packetizer | merge, 180-word and 8-frame closing, word order, packet numbers |
| tb_asic_cfg_link | SPI frames, chip selects, 18-clock bit period, reply |
| tb_dci_tx / tb_gemdc_link_rx | packet framing, disparity, fillers, symbol errors |
| tb_gemdc_event_builder | event assembly, mismatch flag, irq, almost-full stall, port overflow |
| tb_gemroc | one GEMROC: TM events, link/Check errors in trailers, optical copy, TL mode, configuration |
| tb_cgem_readout_top | 4 GEMROCs, 2 GEM-DCs: counts every mechanism (window rejection, overflow, link and Check errors, Full, lost trigger, GEM-DC almost-full, irq, both TL closing rules, mode switches) and fails if one never happens |
| tb_cgem_readout_full | the top at full size and default parameters (22 GEMROCs, 352 links): one trigger through the whole chain to both VME read ports |

The full-size run takes about a minute on a workstation, most of it
compiling. The first event is read out of both GEM-DCs about 280 clocks
after the L1 pulse ends.

## How far to trust it

Every block passes its own test bench. Each test bench has also been shown
to fail when one essential detail of its block is broken (for example the
window edge, the page clearing, the 180-word limit, or the K29.7 end
symbol). The end-to-end test checks hit contents against an independent
model of the window. What has not been done:

- no timing analysis on an FPGA;
- no comparison with the original firmware;
- no test of the word formats against real TIGER data. Those formats are
  assumptions, so they are the first thing to adapt for real hardware.
