# GEMROC readout firmware — trigger matching for a trigger-less front end

The TIGER front-end ASIC never waits for a trigger. Every hit on any of its
64 channels is digitised, time-stamped with a 16-bit coarse counter and
shipped out on a serial link as soon as it exists. The BESIII experiment, on
the other hand, keeps an event only when its Level-1 (L1) trigger fires, and
that decision arrives a fixed 8.6 µs *after* the particles crossed the
detector. The readout board (GEMROC) in between therefore has to remember
every hit for a little more than 8.6 µs. When a trigger arrives, it has to
pick out the hits whose time stamps fall inside the trigger's window and pack
them into one event packet.

This RTL does that with a **time-paged latency buffer** per front-end board
(FEB, two TIGERs). The buffer is a circular memory of 16 pages of 32 hits. A
hit goes into the page chosen by bits [11:8] of its own coarse time, so each
page collects the hits of one 256-clock slice (1.53 µs at 166.6 MHz). The
16 pages span 4096 clocks (24.6 µs) before the memory wraps. A trigger then
needs no search over the whole memory. It reads only the two or three pages
its window touches and keeps the hits that match. The rest of the design
does the following:

* decodes the links;
* turns the BESIII trigger line into clean, time-stamped and queued search
  requests;
* builds the event packets;
* offers a second, trigger-less mode in which every word is streamed out in
  UDP-sized packets. This mode is for debugging and for stand-alone test
  stands.

One board handles four FEBs, i.e. eight TIGERs. The full tracker (80 FEBs)
needs 20 boards.

## Clocking and the time base

Everything runs on one clock, the 166.6 MHz TIGER clock. This is four times
the 41.65 MHz BESIII clock it is derived from. The BESIII clock is not a
second clock domain here. It is represented by `fc_ce`, an enable that is
high one cycle in four. Signals that belong to the BESIII clock are sampled
or changed only in those cycles: L1, check and the simulator outputs.

The L1 distributor keeps a 32-bit time base `ts` that counts TIGER clocks. It
restarts on the data-path reset and on the time-base reset. The same
time-base reset is sent to the TIGERs (`tiger_rst`), so the low 16 bits of
`ts` equal the coarse time the TIGERs write into their hits. That equality
is the foundation of the trigger matching. The first trigger after a reset
can be used to issue this reset, so that all boards of the experiment
restart together (`cfg_auto_ts_rst`). Such a trigger is not searched.

## Data words

All data moves as 64-bit words, eight bytes each, with the kind in bits
[63:62]:

| kind | bits [63:62] | content |
|------|-------------|---------|
| hit | 00 | channel [61:56], TAC [55:54], coarse time [53:38], energy coarse [37:28], time fine [27:18], energy fine [17:8], TIGER number [2:0] |
| frame | 01 | TIGER frame word (one per 2^15 clocks), TIGER number [2:0] |
| counter | 10 | TIGER counter word |
| board | 11 | words made by the board, sub-kind in [61:60] |

The board's own words carry `{11, sub-kind[1:0], board id[4:0],
number[22:0], info[31:0]}`:

* **trigger-matched header** (sub-kind 00): info = the 32-bit trigger stamp.
* **trigger-matched trailer** (sub-kind 01): info = {hit count[15:0],
  status[9:0], overflow flags of FEB 0/1, 00, overflow flags of FEB 2/3}.
  The status holds the input-FIFO full flags and the PLL lock bits.
* **trigger-less header** (sub-kind 10): the packet number.
* **end marker** (sub-kind 11): internal only. It closes the hits of one FEB
  for one trigger, with the number of matched hits in [31:16] and a page
  overflow flag in bit 0.

The exact bit positions are this design's choice. The source gives only the
field list and the 8-byte word.

## TIGER links (`tiger_test_assembly`)

Each TIGER link arrives already deserialised as 10-bit 8b/10b symbols. A
word is one K28.5 comma followed by its eight bytes, most significant byte
first.

The decoder works as follows:

* It looks each symbol up in the 5b/6b and 3b/4b code tables for the current
  running disparity. Both tables are written as functions in `gemroc_pkg`.
* It keeps the running disparity.
* It aligns on the comma. A comma of either disparity is accepted and
  re-aligns the disparity.
* It assembles the word and replaces bits [2:0] with the TIGER number.

An invalid symbol increments a saturating error counter and drops the word it
falls in. A second counter counts hit words. `enable` gates the output, which
is the per-TIGER "enabled for data taking" switch.

The TIGER's configuration link (an SPI-like 10 MHz bus) is not implemented.
Its protocol and register map are not available.

## The FEB path and the latency buffer (`feb_merger`)

The two TIGER streams of one FEB are merged into an input FIFO. Link A wins
a collision. The B word is held for one clock, which is enough because a
link delivers at most one word every nine clocks. What happens next depends
on `tm_mode`.

**Trigger-less:** the FIFO drains into the trigger-less packet builder
unchanged.

**Trigger-matched:** each hit is written to page `p = tcoarse[11:8]` at
location `fill[p]`, and `fill[p]` increments.

* **Clearing pages.** A page is emptied (`fill[p] = 0`) in the cycle the
  local time base enters it. At that moment it holds hits that are 4096
  clocks old, far older than any trigger can ask for.
* **Overflow.** A hit that finds its page full (32 hits) is dropped. It is
  counted in `n_overflow` and sets a flag that travels with the next end
  marker into the trailer. Frame and counter words are not stored in this
  mode.

**The search.** `trig_go` carries the window start `ws = stamp − latency` and
its length `wl`. The search state machine steps through the pages from
`ws[11:8]` to `(ws + wl − 1)[11:8]`:

1. For each page it latches the fill level.
2. It issues one read per clock for locations 0 … fill−1.
3. One clock after each read, it compares the returned hit:
   `(tcoarse − ws) mod 2^16 < wl`. A hit that matches is pushed into the
   output FIFO.

The one-clock wait for the memory's registered read is essential. Leaving it
out makes every comparison see the previous location, so the last hit of
each page is never examined. Reads are issued only while the output FIFO has
at least two free places. A slow packet builder therefore stalls the search
and loses nothing. After the last page, an end marker with the match count
is pushed.

Modular 16-bit arithmetic makes the window correct across the wrap of the
coarse counter and for a trigger stamped at time zero.

Capacity: a window of 1.7 µs (283 clocks) touches at most three pages, so at
most 96 reads per FEB. The buffer needs to keep 8.6 µs plus the search delay
(about 1500 clocks) and keeps 15 full pages (3840 clocks).

## Trigger path (`l1_distributor`, `fc_simulator`)

The L1 line is sampled on `fc_ce`. A real L1 lasts eight BESIII clocks. A
pulse is accepted only if it stays high for at least seven of them. Shorter
pulses are counted as glitches and otherwise ignored.

The **stamp** of an accepted trigger is the time base at its first high
sample. The trigger is then written into an 8-deep queue together with its
number (a 23-bit count of accepted triggers).

The head of the queue is released as `trig_go` only when both of these hold:

* the programmed delay has passed since its stamp. The delay covers the
  variable latency of the TIGER links: a hit may arrive a little after its
  own time.
* no earlier trigger is still being packed. `tm_done` from the
  trigger-matched packet builder ends a trigger.

Handling one trigger at a time keeps the four FEB searches and the packet
builder aligned on the same trigger. Triggers that arrive meanwhile wait in
the queue. With six of the eight places used, `full_out` (the BESIII FULL
line) is raised so that the Fast Control stops sending triggers. A trigger
that finds the queue completely full is counted as lost.

For bench operation without the experiment, `fc_simulator` produces the same
signals: an L1 of eight BESIII clocks every `cfg_fc_period` BESIII clocks,
and a check pulse with every 256th trigger. It honours FULL. `standalone`
selects it instead of the external lines. Check pulses from either source
are counted.

## Packet builders

**Trigger-less (`four_feb_merger_tl`).** The four FEB streams are served
round-robin, one word per clock. A packet starts with its header and closes
after 180 TIGER words, or at the eighth frame word of TIGER 0, whichever
comes first. That gives 180 × 8 + 8 = 1448 bytes, which fits in a standard
1500-byte Ethernet frame with the IP and UDP headers. Eight frame words are
2^18 clocks of data. `pkt_last` marks the last word. The Ethernet MAC that
frames the payload is outside this design.

**Trigger-matched (`four_feb_merger_tm`).** Two identical collectors
(`tm_pair_collector`) serve FEB pair 0/1 and pair 2/3. Each copies its FEBs'
matched hits, in FEB order, into its own FIFO:

* **Pair 0** writes the header first and an end marker last.
* **Pair 1** writes the trailer. It does so only after pair 0 has reported
  completion, so that the trailer can carry the total hit count and the
  overflow flags of all four FEBs.

An assembler copies pair 0's FIFO up to its end marker, then pair 1's FIFO
up to its trailer. Only then does it pulse `tm_done`.

Neither pair can run ahead into the next trigger, for two reasons:

* both completion flags are required before `tm_done`;
* the next trigger is not even released before `tm_done`.

A packet can therefore never mix the data of two triggers, whichever pair
finishes first. In trigger-matched mode the packet goes to the optical link
and to Ethernet at the same time. A word advances only when both are ready.

## Resets and diagnostics

`reset_manager` synchronises the asynchronous power-on reset and stretches
it, or a manual request, to 16 clocks. It also generates the one-clock
time-base reset, either on request or automatically on the first trigger
after a reset.

`diag_dpram` is the window of the board's soft processor. A scan pointer
copies one value per clock into a dual-port RAM. The processor reads any
address with one clock of latency:

| address | content |
|---------|---------|
| 0 | sticky flags (ever set since the last clear) |
| 1 | live flags |
| 2 + i | diagnostic value i |

In the top, the flags are:

| bit | flag |
|-----|------|
| [4:1] | input FIFO full, FEB 0–3 |
| [8:5] | search in progress |
| [10:9] | PLL not locked |
| 11 | FULL |
| 12 | trigger in process |
| 13 | packet builder busy |

The diagnostic values are:

| i | value |
|---|-------|
| 0–7 | 8b/10b errors per TIGER |
| 8–15 | hits per TIGER |
| 16–19 | page overflows per FEB |
| 20 | accepted triggers |
| 21 | glitches |
| 22 | lost triggers |
| 23 | trigger-less packets |
| 24 | check pulses |
| 25 | simulator triggers |

## Top level (`gemroc_top`)

The ports are plain signals:

* the eight symbol inputs `tiger_sym[i]` with `tiger_sym_valid`;
* the Fast Control lines `l1_ext`, `check_ext` and `full_out`;
* the configuration (`tm_mode`, `standalone`, `tiger_en`, `roc_id`,
  `cfg_latency`, `cfg_window`, `cfg_delay`, `cfg_fc_period`,
  `cfg_auto_ts_rst`);
* the reset requests;
* the PLL lock inputs;
* two valid/ready/last output streams of 64-bit words: `eth_*` for the UDP
  payload and `opt_*` for the optical link;
* the processor read port `cpu_*`.

The latency and window are run-time settings. 1433 and 283 clocks
correspond to 8.6 µs and 1.7 µs.

These parts live outside the top, and their signals are ports:

* the clock PLLs;
* the LVDS receivers and deserialisers;
* the Ethernet MAC;
* the optical transceiver;
* the processor.

## Where this design departs from its source or fills gaps

* **Window length.** Two figures for the trigger window appear, 1.6 µs and
  1.7 µs. The window is a setting. The tests use 1.7 µs, the value given as
  the trigger-matching default.
* **Trigger-less packets.** They are described once as closing after eight
  frames and once as closing "every four frame words". Eight is built, and
  `FRAMES_PER_PKT` changes it.
* **TIGER links.** The TIGER has four serial outputs. Here each TIGER is one
  symbol stream, which already carries far more than the required
  60 kHz/channel.
* **Own choices.** The following are this design's own choices, not
  specified:
  * word layouts;
  * queue and FIFO depths;
  * the FULL threshold;
  * the reset length;
  * the diagnostic map;
  * the page overflow policy;
  * the link collision rule;
  * periodic (not random) simulator triggers.
* **Input FIFO overflow.** A word that arrives while a FEB input FIFO is
  full is lost. The full flag is recorded, but the words are not counted.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_tiger_test_assembly` | 8b/10b against known code words; 60 random words through a behavioural link model (`tiger_link_model`), one behind a corrupted comma: exact error and hit counts |
| `tb_feb_merger` | stream order; exact window matching; a full page of 32 hits, including the last location; overflow from 40 hits to 32; search time bound |
| `tb_l1_distributor` | pulses of 3 and 6 clocks rejected, 7 and 8 accepted; stamp; release between `delay` and `delay`+3 clocks after it; hold until `tm_done`; FULL; sync-only triggers |
| `tb_fc_simulator` | pulse length 32 clocks; spacing; check every 256th trigger; FULL |
| `tb_reset_manager` | reset lengths; automatic and manual time-base resets |
| `tb_four_feb_merger_tl` | 180-word packets; closing on the eighth frame; per-FEB order under back-pressure |
| `tb_four_feb_merger_tm` | packets word by word with either pair finishing first and a pair FIFO overrun |
| `tb_diag_dpram` | layout, refresh and sticky flags |

`tb_gemroc_top` runs the whole board at its default size with eight link
models. It is the full-size test. It goes through, in order:

1. trigger-less packets;
2. a switch to trigger-matched mode;
3. external triggers with exact hit-by-hit checking of every packet against
   the hits sent;
4. a glitch;
5. a page overflow;
6. FULL with the outputs stalled;
7. standalone triggering;
8. reading the diagnostic memory.

It counts each of these mechanisms: stall, size close, frame close,
8b/10b error, mode switch, time-base reset, glitch, overflow, FULL, trigger
hold, standalone triggers and check line. A mechanism that never occurred is
a failure. The test finishes in seconds.

`tb_gemroc_rate` runs the board at the operating point it was specified
for:

* every TIGER delivers hits at 64 channels × 60 kHz, with random arrival
  times;
* L1 triggers arrive at random with a 4 kHz mean and at least 3 µs apart;
* the latency is 8.6 µs and the window 1.7 µs;
* both output sinks accept three words in four.

The test checks every one of 40 packets hit by hit against the hits sent,
about 52 hits per trigger. The trigger-matching efficiency must be 100 %,
with no page overflow and no FULL. Each packet must leave well before the
next trigger. The longest packet observed ends 145 clocks (0.9 µs) after the
search delay.

To run a testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_gemroc_top \
    rtl/gemroc_pkg.sv tb/tb_gemroc_top.sv -y rtl -y tb -o sim
./obj_dir/sim
```

## Not built

The following are not built:

* the TIGER ASIC itself (analog), which the testbenches model at its serial
  output;
* its configuration link;
* the soft processor;
* the Ethernet MAC and UDP/IP stack;
* the optical link;
* the PLLs and LVDS I/O;
* the GEM-DC data concentrator;
* the low- and high-voltage distribution.
