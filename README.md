# An event-distribution timing system for a synchrotron light source

A light source's injector repeats one cycle over and over. The linac fires, the
beam goes into the booster, the booster magnets ramp, the beam is extracted into
the storage ring, and the magnets ramp down. At the Swiss Light Source (SLS)
this cycle lasts 320 ms (3.125 Hz). Dozens of devices in many crates must act
at precise points in that cycle, and experiments at the beamlines must know
when an injection is coming.

The system described here does not run a cable per trigger. It **broadcasts
time as a stream of event codes**. A single *event generator* (EVG) sends one
8-bit code every 20 ns on an optical link; code 0 means "nothing in this slot".
Fibre fanouts copy the stream to every crate. In each crate an *event receiver*
(EVR) looks every code up in its own table and turns the codes that concern it
into local actions:

- trigger pulses with programmable delay and width;
- a timestamp counter that every receiver resets on the same event, so all
  crates share one clock;
- a FIFO that records which event arrived and when.

The whole injection cycle is built inside the generator from one reference
pulse: the moment when bucket 0 of the booster and bucket 0 of the storage
ring line up.

This RTL follows the system presented by T. Korhonen and M. Heiniger
(Paul Scherrer Institute) in *Timing system of the Swiss Light Source*. That
paper describes the functions of the blocks, not their internals. Everything
below that is not one of its functions or numbers is this design's own choice;
the section *Departures and own choices* lists these choices.

```
 500 MHz RF ─► bunch_clock ─► ac_line_sync ──sequence start──► evg ─► (fanout ×8) ─► evr ×8
               │  ev_clk, fiducials                             ▲                      │
               └─ booster turn ─────────────external RAM clock──┘         triggers, timestamps,
                                                                          FIFO, daisy-chain out
```

## Time base: RF buckets and the event clock

Everything is phase-locked to the 500 MHz RF (2 ns buckets). `bunch_clock`
runs on the RF clock and keeps three counters:

| counter | modulus | meaning |
|---|---|---|
| RF bucket mod 10 | `EV_DIV` = 10 | gives the 50 MHz event clock `ev_clk` |
| booster bucket | `H_BST` = 450 | booster harmonic number; one turn = 900 ns = 45 event cycles |
| storage-ring bucket | `H_SR` = 480 | storage-ring harmonic number; one turn = 960 ns = 48 event cycles |

Both harmonic numbers are multiples of 10. Booster and storage-ring bucket 0
therefore always fall on an event-clock edge, and they coincide every
lcm(450, 480) = 7200 RF cycles. That is 14.4 µs, 720 event cycles, 16 booster
turns or 15 storage-ring turns. The three fiducials `bst_rev`, `sr_rev` and
`coinc` are made for the event-clock domain. Each changes on a *falling*
`ev_clk` edge and stays high for one whole event period, so the rising edge
that coincides with bucket 0 samples it exactly once, without a race.

Because the event clock stops while `rst` is high, the bunch clock also gives
the event-clock logic its own reset, `ev_rst`. It stays high for seven event
periods after `rst` falls. In the real system the event clock comes from a
separate downconverter and the receivers recover it from the link. Here one
`ev_clk` drives the generator and all receivers, which has the same effect.

## The injection cycle and its start

`ac_line_sync` decides when a cycle starts. It counts rising edges of the
mains reference (through a two-flop synchroniser). On every 16th edge it arms
itself: 50 Hz / 16 = 3.125 Hz. It then waits for the next `coinc` and emits a
one-cycle `start`. The cycle is thus locked to the mains phase and to the
bucket pattern.

The generator's sequencer starts on that pulse and steps through its event
RAM one address per booster turn. Moving an event by one RAM address therefore
moves it by exactly 900 ns, one booster turn.

## Event generator (`evg`)

Four sources compete for the 20 ns slots on the link. `evg_priority` merges
them with fixed priority:

| priority | source | notes |
|---|---|---|
| 0 (highest) | `up_code`, the upstream stream | lets a generator sit in a sub-branch behind another one and add its own events. The machine's events never wait. Tie to 0 in the main generator. |
| 1 | sequencer 0 / event RAM 0 | |
| 2 | sequencer 1 / event RAM 1 | |
| 3 | software event register | one code per host write |

A code that loses waits in its source and goes out in the next free slot. Each
source holds one waiting code.

**Event RAMs** (`evg_event_ram`). The card carries two 512 KB RAMs. Here each
is 2^19 addresses × 8 bits, one event code per address. The host writes them
through `ram_we/ram_sel/ram_waddr/ram_wdata`. The sequencer reads them with one
cycle of latency. Their contents are not reset.

**Sequencers** (`evg_sequencer`). Each sequencer has a configuration
(`evg_seq_cfg_t`):

- `enable`;
- `trig_en`: the external trigger input may start the sequence; a host strobe
  always can;
- `ext_clk`: take the RAM clock from the external clock input instead of the
  internal divider;
- `div`: the internal divider, 45 for one booster turn;
- `end_addr`: the last address played;
- `single`: single-shot mode.

The internal divider restarts at the trigger, so the ticks are aligned to the
start. In the system top the external clock input carries the booster
revolution fiducial.

**Single-shot mode** (`single` = 1) is for top-up. A start trigger runs the
sequence only if the host has armed it with `seq_arm`, and the run disarms it.
The machine then performs exactly one injection cycle on request, while the
triggers keep coming at 3.125 Hz.

If a code is read while the previous one still waits for a slot, the new code
is dropped and the sticky `seq_overflow` flag is set. This can only happen when
higher-priority sources fill slots for longer than one RAM tick.

**Timing through the generator** (cycles of the 50 MHz event clock):

| from | to | latency |
|---|---|---|
| start trigger in cycle T (internal clock) | code at RAM address k on `tx_code` | T + 4 + k·div |
| software write in cycle T | code on `tx_code` | T + 2 |
| `up_code` in cycle T | code on `tx_code` | T + 1 |

## Link and fanout

The real link is Gigabit Ethernet hardware: a transceiver chip and VCSEL
optics. The fanout card copies one input to eight outputs. Neither has logic of
its own, so neither is modelled. The RTL carries the 8-bit code per event
cycle unchanged. The top copies the generator's `tx_code` to `NUM_EVR` = 8
receivers, one fanout card's worth. Each receiver has a `link_locked` input
standing for the transceiver's lock; while it is low, the receiver treats
every code as null.

## Event receiver (`evr`)

```
rx_code ─► [reg] ─► evr_map (256-entry table) ─► actions ─┬► 4 × evr_pulse (delay + width)
            │                                             ├► 14 × evr_pulse (width only)
            └─► tx_code (daisy chain)                     ├► evr_timestamp (reset)
                                                          └► evr_fifo (code + timestamp)
                        evr_refclk: 3 reference-frequency outputs
```

**Decode table** (`evr_map`). One entry per code (`evr_action_t`), holding:

- one trigger bit per channel (4 + 14);
- `fifo_latch`;
- `ts_reset`.

Code 0 never acts. The host must write every entry it relies on; the table is
not reset.

**Output channels** (`evr_pulse`). A channel counts in ticks of its own
prescaler, `presc` event cycles per tick (0 counts as 1). The prescaler
restarts at the trigger. Delay channels wait `delay` ticks and then drive a
pulse of `width` ticks; width-only channels start the pulse at once.
`polarity` = 1 gives an active-low output. A new trigger during delay or pulse
restarts the channel.

**Timestamp** (`evr_timestamp`). Counts event cycles, 32 bits. The cycle in
which a reset event is decoded is time 0. Because every receiver decodes the
same code in the same cycle, all timestamps agree.

**Event FIFO** (`evr_fifo`, 512 entries). Stores `{code, timestamp}` for every
code with `fifo_latch` set. The stored time is that of the decode cycle; an
event that also resets the counter is stored with time 0. The head entry is
shown while `fifo_empty` is low, and `fifo_pop` removes it. A push into a full
FIFO is dropped and sets the sticky `fifo_overflow` (cleared by
`fifo_ovf_clr`).

**Reference outputs** (`evr_refclk`). Three square waves at `ev_clk / ref_div`.

**Receiver timing.** A code present on `rx_code` in cycle T is:

- registered in T+1;
- decoded in T+2, which is when the FIFO push happens and when the timestamp
  reads 0 on a reset event;
- seen by the channels, which are active from T+3+delay·presc up to and
  including T+2+(delay+width)·presc.

`tx_code` repeats `rx_code` one cycle later, so cards can be chained.

## Filling control worked through

The booster has 450 buckets and the storage ring 480. After each booster turn
the storage ring has gone 450 of its 480 buckets, so the booster's bucket 0
faces a storage-ring bucket 30 positions further back. After 16 turns the two
line up again.

The sequence starts at the alignment pulse, and the RAM clock is one booster
turn. Putting the extraction event at address A + n therefore sends the
booster bunch into storage-ring bucket (b₀ − 30·n) mod 480. Sixteen
consecutive addresses reach the sixteen groups of 30 buckets. The bucket
inside a group is chosen by the linac gun delay, in 2 ns steps, by delay
cards outside this system.

`tb_filling_control` runs this through the full system. It reads the bunch
clock's counters at each extraction trigger and sees the storage-ring bucket
step 80, 50, 20, 470, … while the booster bucket stays the same.

## Sizes

| parameter | default | origin |
|---|---|---|
| event code width `CODE_W` | 8 | published design |
| event clock | RF/10 = 50 MHz | published design |
| `H_BST`, `H_SR` | 450, 480 | published design |
| event RAM `RAM_AW` | 19 (512 KB, one code per byte) | RAM size published; layout own choice |
| RAMs/sequencers per generator `NSEQ` | 2 | published design |
| sequencer divider for one booster turn | 45 | follows from 900 ns / 20 ns |
| `N_DLY`, `N_WID`, `N_REF` | 4, 14, 3 | published design |
| `DLY_W`, `WID_W`, `PRE_W`, `REF_W` | 24, 16, 16, 16 | own choice; 2^24 × 20 ns covers 320 ms |
| `TS_W` | 32 | own choice |
| FIFO depth | 512 | own choice |
| mains divider `MAINS_DIV` | 16 | own choice (50 Hz to 3.125 Hz) |
| receivers in the top `NUM_EVR` | 8 | one fanout card |

Synthesised at the defaults, the top has about 7,200 flip-flop bits and
8.6 Mbit of memory. Almost all of the memory is the two event RAMs, which on
the real card are external SRAM chips.

## Departures and own choices

- **Internals.** The published design gives each block's function, not its
  internals. Everything inside is the simplest logic that performs the
  function:
  - the table-driven decoder;
  - the counter-based channels;
  - the single-entry waiting register per source;
  - the end address as the sequence terminator.
- **Host interface.** The VME interface and its register map are not part of
  this RTL. Settings are plain struct ports, and host actions are one-cycle
  strobes.
- **Priority order.** The paper names an event priority resolver but not its
  order. Upstream > RAM 0 > RAM 1 > software is a choice.
- **Channel prescalers.** The published sentence says both kinds of channel
  "also have a clock prescaler … and polarity selection". Here that means a
  per-channel prescaler of the counting clock.
- **Extra outputs.** The receiver's three extra outputs are used, as stated
  in the paper, for reference frequencies. The simple divider is a choice.
- **AC line sync.** Only the block's name is published. Mains locking with a
  divide-by-16 is an interpretation of the 3.125 Hz cycle.
- **Single-shot mode.** Arming and disarming is this design's way of giving
  "single injection cycles".
- **Event clock generation.** `bunch_clock` makes `ev_clk` in logic. A board
  would use a clock buffer or PLL for this; the counters and fiducial phases
  stay the same.
- **Link contents.** Only the 8-bit event code is carried. Whatever else the
  gigabit link carried is not described and is not modelled.
- **Timestamp source.** The timestamp counts event cycles. Counting some
  other clock is not ruled out by the published description.

## Simulating

Every file holds one module or package; `rtl/evs_pkg.sv` must be read first.
Each testbench is self-checking and ends with one line
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb -Irtl rtl/evs_pkg.sv tb/tb_sls_timing_system.sv \
  --top-module tb_sls_timing_system -o sim
obj_dir/sim
```

Testbenches:

- **Per block:** `tb_bunch_clock`, `tb_ac_line_sync`, `tb_evg_event_ram`,
  `tb_evg_sequencer`, `tb_evg_sw_event`, `tb_evg_priority`, `tb_evg`,
  `tb_evr_map`, `tb_evr_pulse`, `tb_evr_timestamp`, `tb_evr_fifo`,
  `tb_evr_refclk`, `tb_evr`. Some override sizes to stay short: RAM address
  width 8 or 10, FIFO depth 16.
- **`tb_sls_timing_system`** runs the whole system at its default size. The
  RF clock runs at 500 MHz, and the mains reference is sped up to a 20 µs
  period. It covers:
  - mains-synchronised starts aligned to the bucket-0 pulse;
  - trigger times and FIFO timestamps in every receiver;
  - an unlocked receiver;
  - single-shot mode with and without arming;
  - the external (booster-turn) RAM clock;
  - a one-turn extraction shift;
  - software and upstream events colliding with the sequence;
  - a forced sequencer overflow.

  It counts each of these mechanisms and fails if one never happened. It
  runs in seconds.
- **`tb_injection_cycle`** plays a complete 320 ms cycle: 355,555 booster
  turns with 20 events, through a full-size generator and two receivers. It
  checks that every event arrives at address × 45 event cycles. It takes about
  15 s.
- **`tb_filling_control`** runs the 16-position filling sequence described
  above through the full system.

## Not included

These parts of the system have no logic here:

- the RF source;
- the gigabit transceivers and optics;
- the fanout card;
- the VME/CPLD interface and flash configuration;
- the signal-level transition modules;
- the linac's own delay generators.
