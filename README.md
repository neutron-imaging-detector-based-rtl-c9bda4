# A trigger-less time-over-threshold strip encoder for a μPIC neutron imager

A micro-pixel chamber (μPIC) neutron imager detects the proton and triton from
³He(n,p)³H in a gas volume. Their ionization drifts onto a 10 × 10 cm² plane
read out by 256 anode strips and 256 orthogonal cathode strips at 400 µm
pitch. Each strip has an amplifier-shaper-discriminator (ASD). Its digital
output is high while the strip's analog pulse is beyond a common threshold.

The encoder in this repository sits between the 512 discriminator outputs and
a two-port memory. Its job is deliberately simple. **Every time any strip
crosses the threshold, in either direction, it emits one 32-bit word: which
strip, when (in 10-ns ticks) and which edge.** There is no trigger and no
event building in hardware. The pulse width (time over threshold), which
stands in for the charge on the strip, is the difference between a strip's
trailing-edge and leading-edge times. It is computed later, in software,
together with clustering hits into tracks. This keeps the hardware small and
fast, and gives charge information without ADCs.

The detector this encoder belongs to is described by Parker et al., *Neutron
imaging detector based on the μPIC micro-pixel chamber* (NIM A). That
description gives what the encoder does, not how it is built. The RTL here is
one straightforward implementation of that behaviour. Every point where it had
to choose is listed in [Design choices](#design-choices-and-departures).

## Word format

| bits  | field    | meaning |
|-------|----------|---------|
| 31    | edge     | 0 = leading edge (signal went over threshold), 1 = trailing edge |
| 30:22 | strip    | 0–255 anode strips, 256–511 cathode strips |
| 21:0  | time     | encoder clock ticks (10 ns) since the last `t0`, modulo 2²² (41.9 ms) |

The published description fixes the word size (32 bits), the three fields
and the edge-bit values (0 at the start, 1 at the end of the discriminator
pulse). The field widths and their order are this design's choice.
`encoder_pkg::hit_word_t` is the matching packed struct.

A pulse of width *w* clocks on strip *s* therefore appears as two words with
the same strip number and times *t* and *t + w*. The two words need not be
adjacent in the stream.

## Data path

```
 asd[511:0] ──► strip_sync ──lead/trail──┬─[255:0]──► hit_collector (BASE 0)   ──► transfer_line_tx ──► line 0
 (async)        2-FF sync +              │                                          FIFO 512, 50 MHz
                edge detect              └─[511:256]► hit_collector (BASE 256) ──► transfer_line_tx ──► line 1
                                                ▲
 t0 ──────────► tof_timer ──── tstamp ──────────┘
```

Everything runs on one 100-MHz clock (`clk`), with an asynchronous active-low
reset (`rst_n`).

* **`strip_sync`** passes each discriminator level through two flip-flops and
  compares the result with its value one clock earlier. A rising level gives a
  one-cycle `lead` pulse and a falling level a one-cycle `trail` pulse. The
  delay is the same for all strips, so pulse widths are not affected. Set
  `ACTIVE_LOW` if the discriminator drives low while over threshold.
* **`tof_timer`** is the time base. It is a 22-bit tick counter. The `t0` input
  (start of a beam pulse at a pulsed neutron source) restarts it at zero, so
  the time field is directly the neutron's time of flight. Without `t0` it
  wraps, and `time_wrap` pulses once per roll-over.
* **`hit_collector`** (one per line) turns edges into words and puts them
  into a single file, one word per clock. It is the heart of the design; see
  below.
* **`transfer_line_tx`** (one per line) holds words in a FIFO and sends them
  on a 50-MHz line to one memory port. Strips 0–255 (anodes) use line 0 and
  strips 256–511 (cathodes) use line 1.
* **`mupic_encoder`** is the top level that wires these together.

## Serializing bursts: the hit collector

This is the part that needs the most care. A particle track lights up a run
of neighbouring strips almost at once. In the measured proton-triton tracks,
about 23 strips on one plane cross threshold within about 9 clocks, and their
pulses are 6–23 clocks wide. Many edges can arrive in the same clock, but a
line can carry only one word per transfer. Edges must therefore wait
somewhere, and each must keep the time at which it happened, not the time at
which it leaves.

Each strip owns **two holding registers**: one for a leading edge and one for
a trailing edge. Each has a pending flag and a 22-bit time stamp, latched in
the clock the edge was seen. One further bit per strip records which of its two
held edges is older.

Every clock the collector offers one word:

1. It picks the **lowest-numbered strip** that has an edge held.
2. If that strip holds both edges, the **older** one goes first. A strip's
   words therefore always leave in time order, which is what offline pairing
   of leading and trailing edges relies on.
3. The word `{edge, BASE + strip, time}` is offered with a valid/ready
   handshake. Once offered, it stays unchanged until accepted, even if a
   lower-numbered strip fires in the meantime (the choice is frozen while
   stalled).
4. On acceptance, that register is freed. An edge arriving in the same clock
   may reuse it.

An edge that finds its register still occupied by the previous edge of the
same kind is **dropped**. The drop is counted in `lost_count`, a saturating
16-bit counter per line. This happens only when a strip fires a whole new
pulse before its previous leading (or trailing) word has left: when the
memory stalls for long, or when tracks pile up (see below). The words that do arrive are always correct: a dropped
edge never corrupts another word. Offline software can use `lost_count` to
discard damaged frames.

An earlier variant with a single register per strip was simpler. It lost the
trailing edge of most strips in an ordinary 20-strip track, because the
leading-edge words of the upper strips were still queued when their pulses
ended. Two registers per strip (793 flip-flop bits and 11 kbit of stamp
storage for 256 strips) remove that loss for isolated tracks of realistic size.

The collector's one word per clock is the real limit of the design under
high rate. Two tracks that hit the same strips within a few hundred
nanoseconds can queue some 40–80 words. A strip near the end of that queue
may then fire again before both of its registers are free, and the new pulse
is dropped. In simulation at 1.5 × 10⁵ neutrons/s, with ~60 words per
neutron, this lost 4 of ~45 700 edges, every one of them counted. At
42 × 10³ neutrons/s it lost none.

Fixed lowest-index priority is not fair. Under continuous overload,
high-numbered strips wait longest. They are never reordered within themselves,
however, and the 512-word FIFO behind the collector accepts a word every
clock, so in normal operation the priority only sets the order inside a burst.

## Transfer lines and back-pressure

Each line runs at half the encoder clock. `line_slot` is high on every second
clock, and a word crosses on a clock edge where `line_slot`, `line_valid` and
`line_ready` are all high. One line thus carries at most 50 Mwords/s, and the
pair 100 Mwords/s. The memory drops `line_ready` when it cannot keep up. In the
original system, the memory module, not the line, was the bottleneck: about
4.5 Mwords/s per port, ~10 Mwords/s in total.

When the memory stalls, the chain backs up in three steps:

1. The 512-word FIFO fills (`fifo_full`).
2. The collector's offered word waits.
3. Strips whose registers are occupied start dropping edges (`lost_count`).

When the memory is ready again, the FIFO drains at the full line rate of one
word per two clocks.

## Timing

* A lone edge reaches `line_valid` on the 4th rising clock edge after the
  discriminator level changes (2 for synchronization, 1 to latch into the
  collector, 1 to write the FIFO).
* The time stamp of an edge is the `tof_timer` value present two clock edges
  after the level change. The offset is the same for every strip and both
  edge kinds.
* After `t0` is sampled high, the time field counts from 0.
* Throughput: the collector moves up to 1 word per clock per line into the
  FIFO. Each line moves up to 1 word per 2 clocks.

## Design choices and departures

Taken from the published description:

* the 100-MHz synchronizing clock (10-ns time unit);
* the 32-bit word carrying strip number, time and an edge bit, with 0 for a
  leading and 1 for a trailing edge;
* one word for each edge of every pulse, with no trigger;
* two 50-MHz parallel lines into a two-port memory;
* 512 strips, from 10 cm at 400 µm pitch on two planes, which also matches
  "four encoders of 128 strips" in the proposed upgrade.

Chosen here, because the description is silent:

* the field widths (1 + 9 + 22) and their order;
* the `t0` input that restarts the time base (time of flight is measured,
  but how the encoder learns of the beam pulse is not stated);
* the split of anodes onto line 0 and cathodes onto line 1;
* the two-stage synchronizer, the discriminator polarity (`ACTIVE_LOW`
  parameter) and the asynchronous reset;
* the per-strip holding registers, the lowest-index priority, the oldest-first
  rule and the counted loss of edges;
* the valid/ready handshake inside the encoder, the `line_slot` / `line_ready`
  line protocol and the FIFO depth of 512 words.

Not in this RTL:

* the detector itself;
* the ASD chips (analog);
* the VME memory module and the PC that reads it out;
* the offline reconstruction: pairing edges into pulse widths, clustering into
  tracks, track length, pulse-width sum and proton-triton separation.

The faster readout proposed as an upgrade, several encoders each sending over
Gigabit Ethernet, is also not implemented.

## Size

At the default parameters, coarse synthesis of `mupic_encoder` gives about
7 900 word-level cells and 3 200 flip-flop bits. The two collectors' time
stamps (2 × 512 × 22 bits) and the two FIFOs (2 × 512 × 32 bits) make up
about 55 kbit of memory. On line 0, bit 30 of the data (strip bit 8) is
always 0 by construction.

## Files

| file | content |
|------|---------|
| `rtl/encoder_pkg.sv` | word struct, edge enum, widths |
| `rtl/strip_sync.sv` | synchronizer and edge detector |
| `rtl/tof_timer.sv` | time base with `t0` restart |
| `rtl/hit_collector.sv` | per-strip holding registers and serializer |
| `rtl/sync_fifo.sv` | register-array FIFO (helper) |
| `rtl/transfer_line_tx.sv` | FIFO and 50-MHz line |
| `rtl/mupic_encoder.sv` | top level |
| `tb/tb_*.sv` | self-checking testbench per module |
| `tb/vme_memory_model.sv` | behavioural memory port: random or forced-busy `line_ready` |

## Verification

Each testbench is self-checking. It ends by printing
`TB_RESULT checks=N failures=M`, and it has a watchdog.

* `tb_strip_sync` compares edges with a delayed copy of random inputs in
  both polarities.
* `tb_tof_timer` checks counting, `t0` restarts and roll-over against an
  integer count.
* `tb_hit_collector` covers three things:
  * eight simultaneous edges leave in strip order, one per clock, checked
    against raw bit positions;
  * hold-and-drop with the consumer stalled;
  * 20 000 cycles of random edges under random back-pressure. Every word must
    be the next not-yet-delivered edge of its strip, with the correct time.
    The missing edges must equal `lost_count`.
* `tb_transfer_line_tx` checks in-order delivery, the slot alternation,
  never two words in consecutive clocks, FIFO full under a busy memory, and
  exactly 500 words per 1000 clocks at saturation.
* `tb_mupic_encoder` runs the whole encoder at its default size (512 strips).
  It does the following:
  * checks the single-pulse latency and width;
  * restarts the time base with `t0`;
  * sends 100 proton-triton-like tracks (15–30 neighbouring strips per plane,
    widths 5–25 clocks) into a memory that is ready half the time, with no
    edge lost;
  * overloads the encoder with a busy memory (FIFO full, edges lost), then
    checks the drain rate;
  * sends a track across the time-stamp roll-over.

  At the end, every edge is either delivered with the exact expected strip,
  line, edge bit and time, or counted as lost. The test also counts how often
  each mechanism occurred: simultaneous edges, stalls, FIFO full, losses,
  `t0` and wrap. It fails any mechanism that never happened. It takes about
  15 s of simulation, most of it idling up to the 2²² roll-over.

* `tb_workload_rates` drives the full-size encoder with Poisson-distributed
  neutrons. Each neutron is a track of 10–20 strips on each plane, about 60
  words, matching the ratio of data rate to neutron rate quoted for the
  original system. It runs two beam frames:
  * 20 ms at 42 × 10³ n/s, the rate of a radiography run on a pulsed source:
    ~2.5 Mwords/s, nothing lost;
  * 5 ms at 1.5 × 10⁵ n/s, the highest rate at which the original system
    stayed linear: ~9 Mwords/s, a few pile-up losses.

  Every word is checked exactly. Missing edges must equal `lost_count`, and
  the loss must stay below 0.1 %.

Assertions in the RTL check the handshake rules: an offered word and a word
on the line hold until taken, and a strip never shows both edges at once.

To run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/encoder_pkg.sv tb/tb_mupic_encoder.sv --top-module tb_mupic_encoder -Mdir obj
./obj/Vtb_mupic_encoder +verilator+rand+reset+2
```

Replace `tb_mupic_encoder` with any other `tb_*` name.

## Changing the design

* **Strip count and lines:** `mupic_encoder` takes `N_STR` and `N_LINES`.
  `N_STR` must divide evenly by `N_LINES` and must not exceed 512, the 9-bit
  strip field. Line *p* carries strips *p·N_STR/N_LINES* upward.
* **Time range:** change `STRIP_W` in `encoder_pkg`. `TIME_W` follows as
  31 − `STRIP_W`.
* **Buffering:** `FIFO_DEPTH` must be a power of two.
* **Discriminator polarity:** `ACTIVE_LOW`.
* **Handshake:** an external receiver must honour the line handshake. A word
  moves only on a clock edge with `line_slot && line_valid && line_ready`.
  `line_ready` may change in any cycle.
