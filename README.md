# XTRP — track extrapolation and distribution for a Level-1 trigger

Every 132 ns a drift-chamber track finder reports its result for all 288
azimuthal segments of the detector (24 wedges of 15°, 12 segments of 1.25° per
wedge), whether or not a track was found. The XTRP sits behind it and does three
things with that stream, in a fixed pipeline without ever stalling:

1. **Extrapolation.** Each track is looked up in a RAM that tells where it lands
   in the muon chambers and the calorimeter. The per-segment answers are ORed
   per wedge, and across wedge and board borders, and sent out as an L1 MUON word
   and an L1 CAL word per wedge.
2. **Track trigger.** Up to two tracks per wedge, six overall, go to a Track
   Trigger board. It evaluates all 15 track pairs in lookup RAMs and produces a
   16-bit L1 TRACK word. Bit 15 of that word is an automatic accept when more
   than six tracks were eligible.
3. **Track lists.** All segments are held for up to 32 crossings. On a Level-1
   accept, the crossing's non-empty tracks are collected through a token ring
   into two FIFOs. One FIFO feeds the Level-2 processor and the other the SVT.
   Each list ends with an end-of-event word that carries the bunch counter.

The RTL models the crate: one Clock/Control board (`clock_ctrl`), twelve Data
Boards (`data_board`) and one Track Trigger board (`track_trigger`), wired
together by `xtrp_top`.

## Time: crossings, phases and the clock enable

The crate runs from one 33 ns clock, `clk`. A crossing is four cycles, the four
**phases** 0..3. Phase 3 is the last cycle of a crossing; the `ev_stb` strobe
marks it wherever a block works once per crossing.

The Clock/Control board does not gate the clock. It drives a clock enable, `ce`,
that every datapath register uses. The crate's three clock modes become three
ways of producing `ce`:

| mode (reg 0x00) | `ce` | used for |
|---|---|---|
| 0 normal | always 1; the phase is re-aligned by `cdf_tick` (the next phase is 1) | running |
| 1 VME | one cycle per write to reg 0x01 | stepping the crate edge by edge and reading every stage |
| 2 burst | `burst length` (reg 0x02) cycles per write to 0x03 or `burst_trig` | full-speed bursts of a few crossings |

The configuration bus (`cfg_*`), which stands in for the boards' VME
interfaces, is never gated by `ce`. Lookup tables and registers can therefore be
written while the crate is stopped.

## The cable word and the Pipes

Each wedge arrives on its own cable. In each phase, the cable carries a 48-bit
word: three 13-bit tracks, the 8-bit bunch number and a bunch-0 bit. Over a
crossing, the four words carry all 12 segments of the wedge.

A Data Board has eight Pipes (`xtrp_pipe`), four per wedge. Pipe *k* of a wedge
takes the word of phase *k*. From phase 0 of the next crossing on, all 24 tracks
of the board are stable together.

Each Pipe also does three more jobs:

- **Synchronisation check.** It checks that the bunch number counts up by one,
  or restarts at 0 with the bunch-0 bit. A mismatch sets a sticky sync-error
  bit, which is readable and cleared by a register write.
- **Level-1 pipeline.** It stores its three tracks and bunch number in a
  Level-1 pipeline (`l1_pipeline`) of programmable depth. An accept copies the
  entry written `depth` crossings earlier into one of four Level-2 buffers.
- **Read-out.** When it holds the read-out token, it puts its non-empty tracks
  on the read-out bus, one word per cycle, and then passes the token on. A track
  is non-empty when its pT code is not 124.

Because the Pipe writes a crossing's tracks when the next crossing ends, an
accept that arrives at the end of crossing *n* with depth *d* returns crossing
*n − d − 1*. The Clock/Control board's bunch-counter pipeline is aligned the
same way.

## Lookup phases: one RAM, eight answers per track

Each segment has one 32K × 36 RAM (`lut_ram`). Its address is
`{phase, 13-bit track}`, so the track word stays fixed for a whole crossing
while the phase bits step four times. The 36 output bits are two 18-bit
"sides", CM (bits 17:0) and IM (bits 35:18). That gives eight lookups per
track:

| lookup phase | CM side | IM side |
|---|---|---|
| 0 | CMU, high pT (18 × 2.5°) | CAL, 16 bits (8 pT bins × two wedges) + bit 16 = Track Trigger threshold |
| 1 | CMU, low pT | φ-gap and TOF, 2 bits each for three wedges |
| 2 | CMX, high pT | IMU, high pT |
| 3 | CMX, low pT | IMU, low pT |

An 18-bit muon field covers 45°: the segment's own wedge and both neighbours.
The 16 calorimeter bits cover the own wedge and one neighbour. Which neighbour
depends on which half of the wedge the segment lies in, so segments 0–5 feed
the wedge below and segments 6–11 the wedge above.

The RAM contents are the physics: they are computed outside the crate and
loaded over the configuration bus. A broadcast address writes the same entry
into all 24 RAMs of a segment position on all boards.

## Compression: stage 0, 1 and 2

The lookup results are reduced to per-wedge bits in three register stages, one
33 ns step each, so one lookup phase passes through per cycle.

- **Stage 0** (`seg_or`) ORs the 12 RAM outputs of a wedge. Any RAM output can
  be replaced by a bypass register to test the OR stages bit by bit. The result
  is normalised into eight bits each for "below", "own" and "above", per side.
- **Stage 1** (`wedge_or`) ORs the two wedges of the board. It also registers
  the bits destined for the neighbouring boards.
- **Stage 2** (`wedge_or`) ORs in the bits received from the boards below and
  above. Board 11 and board 0 are neighbours, because azimuth wraps around.

`extrap_out` collects the four phases into a 40-bit MUON word and 8 CAL bits
per wedge. Both words change together once per crossing.

**Latency.** The words of crossing *N* are on the outputs from phase 0 to
phase 3 of crossing *N + 3*. That is 9 cycles (297 ns) after the last cable word
of *N* and 12 cycles (396 ns) after its first.

The next wedge's neighbour words arrive one cycle later than the own wedge's,
and the stages are timed for that. This schedule is the easiest part of the
design to get wrong when changing it. `tb_data_board` checks it, phase by phase,
on the real neighbour connections of a board.

## The Track Trigger path

**Selecting tracks (Data Board).** In lookup phase 0, IM bit 16 of every RAM
says whether that segment's track passes the single programmable Track Trigger
threshold. `track_fpga` turns these 12 bits per wedge into two things:

- a **hit code** of 0, 1 or 2, with more than two counted as two (the function
  of the board's Code PROM);
- the segments with the smallest and the largest φ among the set bits (the
  Address PROM). These two "outer" tracks are latched.

**Assigning slots (Track Trigger).** The Track Trigger adds up the 24 hit codes
in wedge order. It returns to each wedge a 3-bit slot code: the first of the six
track slots that wedge may fill, or 7 for none. The Data Board then drives its
tracks on a time-multiplexed bus that carries two slots per cycle:

- slots 0–1 in phase 3;
- slots 2–3 in phase 0 of the next crossing;
- slots 4–5 in phase 1 of the next crossing.

The bus is wired-OR; undriven lanes are zero.

**Decision.** Six `tt_sort` units form the pair addresses. Three give pT
addresses built from `{short, isolation, 7-bit pT}`. Three give global-φ
addresses: `12·wedge + segment`, 0..287. Each unit serves five of the 15
pairs. An empty slot reads as pT 124 or φ 511, so that one-track criteria can be
written as (track, empty) pairs.

Fifteen pT RAMs and fifteen φ RAMs (512K × 8 each) are read twice, with the
19th address bit at 0 (phase 3) and then at 1 (phase 1). For each pair, the pT
output is ANDed with the φ output, and all pairs are ORed. Each read gives 8
bits; together they form the 16-bit word. Bit 15 is then replaced by the
auto-accept bit (more than six eligible tracks), leaving 15 programmable
triggers.

The trigger word of crossing *N* is valid from phase 3 of *N + 3* to phase 2 of
*N + 4*. That is 6 cycles (198 ns) after the last track is on the bus. It is
also written into a Level-1 pipeline with four Level-2 buffers (`tt_l2_trig`).

## Read-out: accept queue, token ring, FIFOs

The Clock/Control board samples `l1_accept_in` and `l1_buf_in` in phase 3 and
passes them to every board. Accepts wait in a 4-deep queue, one entry per
Level-2 buffer. For each accept:

1. The board sends the token, together with the buffer number, through all 96
   Pipes: board 0 Pipe 0 to board 11 Pipe 7, and back.
2. Every word on the read-out bus, `{eoe = 0, global segment, track}`, is
   written into both FIFOs (`sync_fifo`).
3. When the token returns, the end-of-event word
   `{eoe = 1, buffer, 8-bit bunch counter}` is appended.

The read-out pauses (`ro_hold`) while either FIFO has fewer than five free
words. The Level-2 and SVT links drain the FIFOs through valid/ready
handshakes. An accept arriving with a full queue sets `err_queue`. A write into
a full FIFO sets `err_fifo`; the hold rule is meant to prevent that.

One event takes about two cycles per Pipe plus one per track: roughly 200 to
500 cycles (6.5–16 µs). The Level-1 path is never affected by read-out.

## Configuration map

`cfg_addr[31:28]` selects the unit. Reads return data one cycle after the
address. Each unit drives zero when it is not addressed, and the top ORs the
read data of all units.

| unit | local address | meaning |
|---|---|---|
| 0 Clock/Control | 0x00 mode, 0x01 step, 0x02 burst length, 0x03 burst start, 0x04 bunch-counter depth | clock and read-out |
| 1 Track Trigger | `[23]` 0 pT / 1 φ RAM, `[22:19]` pair 0..14, `[18:0]` RAM address; pair 15: reg 0x00 depth, 0x01 trigger word (read) | pair RAMs |
| 2 Data Board | `[27:24]` board, 15 = all. `[23]` = 1: segment RAM write (`[18:15]` segment, `[14:0]` address, `[19]` wedge, `[22]` both wedges). `[23]` = 0: registers 0x00 depth, 0x01 test input, 0x02 sync error / clear, 0x08+p test tracks, 0x20+12w+s bypass data, 0x38 bypass mask, 0x40–0x49 read-back of stages 0–2 and of the MUON/CAL words | per board |

## Where this RTL departs from, or adds to, the description

- **Clocks.** The analog clock path is replaced by one clock and a clock
  enable. Not built: PECL conversion, the tap filter, the clock chip and the
  3 ns programmable delay.
- **Not built.** The transition modules (LVDS, Channel Link serialiser,
  cables) and the VME protocol. Their signals are top-level ports. The
  configuration bus replaces VME.
- **Calorimeter width.** The overview of the system speaks of four calorimeter
  bits per wedge. The Data Board description and its block diagram give eight
  (8 pT thresholds in the 16-bit lookup). The RTL sends eight.
- **Output latency.**
  - The requirement "within 300 ns of the input" is met when counted from the
    last cable word (297 ns). Counted from the first word, it is 396 ns, which
    matches the Data Board processing time that is also quoted.
  - The L1 TRACK word comes 429 ns after the last cable word: 198 ns after the
    Track Trigger has all its tracks. The 396 ns requirement is met only in the
    second reading.
- **OR stages.** On the boards, the OR stages are open-collector bus drivers
  (a wired-AND of active-low lines). Here they are plain logic ORs.
- **Slot codes.** They are computed by an adder chain rather than by lookup
  RAMs. The PROMs of the Data Board are written as the equivalent logic.
- **Own choices.** These are not specified and were chosen here:
  - the bus schedule;
  - the bit positions in every word (track word, cable word, MUON word,
    read-out word);
  - the register map;
  - the bunch-number check rule;
  - the FIFO depth (1024);
  - the hold rule.
- **Auto-accept.** With more than six tracks, the pair bits of the first six
  tracks are still reported next to the auto-accept bit.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=… failures=…`. The tests compute their expected values from
their own model of the tables and timing, not from the RTL.

`tb_xtrp_top` runs the whole crate at its default size for 1000 crossings. It
uses random lookup tables and a pool of random tracks, and covers:

- normal running, including dense crossings that trigger auto-accepts;
- neighbour bits across boards;
- a RAM bypass;
- a sync error and its clearing;
- test input mode;
- Level-1 accepts with the track lists compared word by word on both links;
- links stopped until the read-out holds;
- burst mode with its cycle count;
- VME stepping of crossings whose pair RAMs are programmed so that the trigger
  word is known.

It counts each of these and fails if one never happened.

With plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/xtrp_pkg.sv rtl/l1_pipeline.sv rtl/lut_ram.sv rtl/xtrp_pipe.sv rtl/seg_or.sv \
  rtl/wedge_or.sv rtl/extrap_out.sv rtl/track_fpga.sv rtl/data_board.sv rtl/sync_fifo.sv \
  rtl/clock_ctrl.sv rtl/tt_sort.sv rtl/track_trigger.sv rtl/xtrp_top.sv \
  tb/tb_xtrp_top.sv --top-module tb_xtrp_top -o sim && obj_dir/sim
```

Block testbenches need only the package and the block's own modules. For
example, `tb_track_trigger` needs `xtrp_pkg`, `l1_pipeline`, `lut_ram`,
`tt_sort` and `track_trigger`.

Most block testbenches name their parameters at the default values. Three
reduce a size to reach the interesting corners quickly:
- `tb_sync_fifo` and `tb_clock_ctrl` use a 16-word FIFO;
- `tb_l1_pipeline` uses a 16-bit entry.

`tb_data_board` and `tb_xtrp_top` run at full size.

The Track Trigger's 30 pair RAMs hold 2^19 bytes each, so the top needs a few
hundred megabytes in simulation.
