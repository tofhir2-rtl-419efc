# TOFHIR2 digital readout — SystemVerilog model

TOFHIR2 reads out 32 SiPM channels of the CMS Barrel MIP Timing Detector. It time-stamps each
hit to about 10 ps and measures its charge.

**Measurement.** Each channel time-stamps a hit with a 160 MHz coarse counter and a fine time.
The fine time is the charge a time-to-amplitude converter (TAC) gathers between the
discriminator edge and the next clock edge. Each channel has eight sets of TAC and charge
buffers, so that Poisson bursts of hits do not cost dead time. One 40 MS/s ADC per channel
digitises the buffers afterwards.

**Output.** Hits arrive at about 2.5 MHz per channel, far more than the back end wants. The chip
therefore holds every digitised event until the experiment's trigger decision for its 25 ns
bunch crossing arrives:
- an optional L0 decision, after a shorter latency (1 µs by default here);
- the L1 decision, 12.125 µs later.

Only accepted events go out, on two 320 Mb/s 8b/10b links.

**Design in this repository.** The digital part is synthesizable SystemVerilog:
- the channel trigger logic;
- the digitisation sequencer;
- the two-level trigger filtering;
- the configuration link with triplicated registers;
- the output links.

The TAC, the charge integrator (QAC) and the SAR ADC are behavioural models, so a channel can be
simulated from discriminator edges to bits on the output links. The analog front end is outside
the model: pre-amplifier, DLED filters, discriminators, delay line, DACs and pads. Its digital
controls are brought out as ports.

Everything here follows the published description of TOFHIR2 where it gives the detail. Where
it does not, the choice is this design's own; each file's opening comment says which is which.
The list under *Design choices and differences* below collects them.

## Directory layout

| path | contents |
|------|----------|
| `rtl/` | design: two packages and one module per file |
| `tb/`  | one self-checking testbench per block, the end-to-end testbench `tb_tofhir2_top` and the rate test `tb_workload_rate` |

## Top level: `tofhir2_top`

```
 do_t1/do_t2/do_e[32] ─┐  e_current[32]
                       ▼
   ┌────────── channel ×32 ─────────────────────────────┐
   │ channel_trigger → tac_bank×2, qac_bank → sar_adc    │
   │ channel_digitizer, event_counter → frame_arbiter    │
   └───────────────┬─────────────────────────────────────┘
                   │ 2-word frames (4 channels per group)
   ┌───────────────▼──── trigger_buffer ×8 ──────────────┐
   │ frame_arbiter(4) → trigger_filter L0 → trigger_filter L1
   └──────┬──────────────────────────────┬───────────────┘
          │ L0-accepted                  │ L1-accepted
   frame_arbiter(8)               frame_arbiter(8)
          └──────────► link_mux ◄────────┘ ◄── replies (cfg_rx)
                     │          │
                 tx_link      tx_link
               (primary)    (secondary)
                 tx_pri[1:0]  tx_sec[1:0]

 timetag (coarse time, Resync decode) · trig_rx (L0/L1 bitstream)
 cfg_rx (80 Mb/s commands) → tmr_cfg (35 × 64-bit registers, TMR)
 test_pulse_gen (external pulse or internal generator clocked by tp_in)
```

**Clock.** Everything runs on the 160 MHz chip clock except the test pulse generator. The
generator runs on the test-pulse clock, so moving that clock's phase moves the pulse.

**Ports.**

- Inputs:
  - `clk`, `rst_n`, `resync`;
  - `trig_in`: 80 Mb/s trigger line;
  - `cfg_in`: 80 Mb/s command line;
  - `tp_in`: test pulse, or the test pulse clock;
  - `chip_id[4:0]`;
  - `rx_align_mode`;
  - the discriminator outputs `do_t1` (already delayed), `do_t2` and `do_e`, one bit per
    channel;
  - `e_current`: the energy-branch current sample per channel, in ADC LSB per clock cycle. This
    stands for the analog signal entering the QAC.
- Outputs:
  - `tx_pri[1:0]` and `tx_sec[1:0]`: the two bits sent per clock cycle on each DDR link, rising
    edge first;
  - `ch_cfg_o`: every channel's configuration register, for the analog front end;
  - the ALDO2 DAC codes and control bits;
  - the monitor select;
  - `tp_analog`: the test pulse routed to the analog injector.

**Parameters.**

| name | default | meaning |
|------|---------|---------|
| `NCH` | 32 | channels |
| `GROUP` | 4 | channels per trigger buffer |
| `L0_DEPTH` | 64 | L0 event FIFO, 32-bit words per group |
| `L1_DEPTH` | 256 | L1 event FIFO, words per group |
| `MEM_DEPTH` | 1024 | trigger memory, 25 ns bins |
| `REFRESH` | 16000 | idle cycles before a buffer refresh (100 µs) |

## Data flow of one hit

1. **Trigger** (`channel_trigger`).
   - The channel is armed on one of its eight buffer sets. The rising edge of the delayed T1,
     while T2 is high, starts TAC1 of that set asynchronously. The next rising clock edge stops
     it, and that edge's coarse time becomes the event time.
   - A T1 without T2 starts nothing and costs no dead time.
   - The trigger window (`win` cycles, default 4 = 25 ns) follows. During it the QAC integrates,
     E is watched, and TAC2 is started by the configured edge (T1 or T2, rising or falling).
     TAC2's coarse time is kept as a 6-bit difference to TAC1's.
   - At the end of the window:
     - if E fired, the event is valid;
     - if not, it is rejected, with win−1 = 3 cycles (18.75 ns) of dead time.
   - Either way the channel re-arms on the next buffer set, round robin. If that set is still
     waiting for the ADC, the channel stays unarmed and counts each hit as lost.
   - After 100 µs armed with no trigger, the channel moves to a fresh buffer set. This stops
     leakage from degrading the stored values.
2. **Analog storage** (`tac_bank`, `qac_bank`, behavioural).
   - TAC value = 16 + Δt/10 ps, where Δt runs from the trigger edge to the next clock edge. The
     16 is a pedestal.
   - QAC value = Σ(`e_current` − baseline DAC) over the window, clipped to 10 bits.
3. **Digitisation** (`channel_digitizer`, `sar_adc`).
   - Valid events wait in an 8-entry queue, and their buffer sets are marked busy.
   - The ADC converts TAC1, TAC2 (three-measurement mode only) and QAC. Each conversion takes
     4 cycles (40 MS/s).
   - The set is then released and the event leaves as two 32-bit words.
4. **Counter** (`event_counter`). Each channel has a 24-bit counter. It counts one of: T1
   crossings, low-energy rejects, lost hits, or valid events. It sends a counter frame every
   2^`cnt_period` cycles.
5. **Filtering** (`trigger_buffer`, `trigger_filter`).
   - The frames of four channels are merged into the L0 filter. Its "next level" output feeds
     the L1 filter.
   - Each filter holds events in a FIFO and writes the trigger bits of its level into a circular
     memory. A bit arrives `latency` bins after the bin it refers to, and is stored at that bin.
   - The MATCH logic looks up the bin of the head event (coarse time / 4):
     - every event goes on to the next level;
     - an accepted event also goes to the link.
   - Counter and reply frames pass everywhere.
   - An event whose bin is over two bins past due, with no entry in memory (stalled so long that
     the entry was overwritten), is dropped and counted as expired.
6. **Links** (`link_mux`, `tx_link`). Each link packs each frame as a start character and eight
   bytes, encodes it in 8b/10b and serialises it at 2 bits per clock (320 Mb/s DDR).

## Formats

**Event frame** (two words):

| word | bits | field |
|------|------|-------|
| 0 | 31:27 | channel |
| 0 | 26:24 | buffer set used |
| 0 | 23:22 | frame type: 0 event, 1 counter, 2 reply |
| 0 | 21:16 | TAC2 − TAC1 coarse difference |
| 0 | 15:0 | coarse time tag (160 MHz cycles since Resync) |
| 1 | 31:22 | TAC1 fine |
| 1 | 21:12 | TAC2 fine |
| 1 | 11:2 | QAC |
| 1 | 1 | TAC2 edge seen in the window |
| 1 | 0 | three-measurement mode |

**Counter frame:**
- word 0: {channel, 0, type 1, 0, coarse time};
- word 1: {8'h00, count}.

**Reply frame:**
- word 0: {chip ID, command, type 2, address, 16'h0};
- word 1: the data.

**On the link:**
- K28.1 starts an event frame, K28.2 a counter frame and K28.3 a reply.
- The eight bytes follow, most significant first.
- K28.5 fills idle time.
- 10-bit characters go out with bit *a* first.

**Trigger line:**
- One bit per 80 MHz period.
- In each 25 ns bin, the L0 bit is sampled when the coarse time is 1 mod 4 and the L1 bit when
  it is 3 mod 4.
- The bin number is coarse time / 4.

**Command line.** 8b/10b at 80 Mb/s with K28.5 idles; the receiver aligns on the comma. A command
is:
- K28.0;
- {chip ID[4:0], cmd[2:0]};
- address;
- for a write, eight data bytes, MSB first.

The commands are:
- 1: write;
- 2: read bits 31:0;
- 3: read bits 63:32;
- 4: read the SEU counter.

A read is answered by a reply frame on the primary link. Commands carrying another chip ID are
ignored, so up to 32 chips can share the line.

**Registers.** There are 35 registers of 64 bits:

- 0–31: one per channel (`ch_cfg_t`):
  - thresholds and ranges for T1, T2 and E;
  - DLED delay tap and trims;
  - E gain;
  - QAC baseline DAC;
  - counter enable and mode;
  - window length;
  - TAC2 edge;
  - three-measurement mode;
  - test-pulse enable;
  - channel enable.
- 32: L0 and L1 latency (bins), link mode, counter period.
- 33: test pulse — internal/external, target (trigger logic or analog), period, length.
- 34: ALDO2 DAC codes and ranges, ALDO enable and monitor range, monitor select.

Defaults are in `tofhir2_pkg`: L0 latency 40, L1 latency 485 bins (12.125 µs), window 4, three
measurements.

**Resync.** The time tag reads 0 in the cycle after Resync falls. The Resync length selects the
action:

| Resync length | action |
|---------------|--------|
| 1–3 cycles | time tag only |
| 4–15 cycles | also clears the event chain (FIFOs, queues, channel state) |
| ≥16 cycles | full reset, configuration included |

**Link modes** (register 32):

| mode | primary link | secondary link |
|------|--------------|----------------|
| 0 | L1 data and replies | L0 data |
| 1 | replies | L1 data (backup); L0 dropped |
| 2 | alternate L1 frames and replies | alternate L1 frames; L0 dropped |

## Radiation tolerance

`tmr_cfg` keeps three copies of every configuration register and votes them. A disagreement
passes through a chain of four synchronising registers. After that, all copies are rewritten
with the voted value and a saturating 16-bit SEU counter is incremented; command 4 reads the
counter.

Only the configuration registers are triplicated. The chip also triplicates its state machines
and its clock and Resync trees, normally with a netlist-level tool; that is not reproduced here.

## Verification

Every block has a self-checking testbench in `tb/` that predicts results independently of the
block. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

To show that each testbench can fail, it was also run against a copy of its block with one
deliberate bug, and it failed. The changes:

| block | deliberate bug |
|-------|----------------|
| encoder (`enc8b10b`) | running disparity never updated |
| decoder (`dec8b10b`) | K flag output inverted |
| `ddr_tx` | symbol loaded every fourth cycle instead of every fifth |
| `pack` | counter frames start with the event character K28.1 |
| `tx_link` | serialiser fed the inverted character |
| `timetag` | full reset selected one Resync cycle too early |
| `trig_rx` | L0 bit sampled in the wrong half-bin |
| `test_pulse_gen` | pulse one `tp_in` cycle too long |
| `trigger_filter` | every event forwarded to the link, whatever the trigger bit |
| `trigger_buffer` | L1 level fed with the L0 trigger bits |
| `frame_arbiter` | lock released after the first word |
| `link_mux` | backup mode keeps L1 on the primary link |
| `channel_trigger` | energy discriminator ignored |
| `channel_digitizer` | TAC2 never converted |
| `event_counter` | counter not restarted after a counter frame |
| `channel` | counter modes for T1 crossings and low-energy rejects swapped |
| `tmr_cfg` | SEU counter never counts |
| `cfg_rx` | chip ID not compared |
| `tac_bank` | TAC gain 5% low |
| `qac_bank` | baseline current not subtracted |
| `sar_adc` | comparator drops a bit when the trial value equals the input |
| `tofhir2_top` | L1 trigger bits matched one bin off |

`tb_tofhir2_top` runs the whole chip at its default size: 32 channels, L1 latency 485 bins. It
takes about 150 µs of chip time and under a minute of simulation. The bench:

- configures the chip over the serial command line;
- fires random hits at known sub-nanosecond times on 30 channels;
- sends random L0/L1 decisions for every bin on the trigger line;
- decodes both output links bit by bit.

It checks every event's coarse time, TAC1 and TAC2 fine times (±1 bin), coarse difference and QAC.
It checks that exactly the events with an L1 accept appear on the primary link and those with an
L0 accept on the secondary link. It counts, and fails if any never happened:

- valid events;
- low-energy rejects;
- buffer-full losses (a burst on one channel);
- the 100 µs idle refresh;
- internal test pulses;
- L0 and L1 accepts and rejects;
- counter frames;
- register read replies;
- backup link mode;
- Resync with chain clear;
- full reset restoring the default configuration.

`tb_workload_rate` (see the capacity section below) runs the chip at its expected hit and trigger rates
and checks every accepted event.

To run one testbench with Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl -y tb +libext+.sv -Irtl \
  rtl/code8b10b_pkg.sv rtl/tofhir2_pkg.sv tb/tb_tofhir2_top.sv --top-module tb_tofhir2_top
./obj_dir/Vtb_tofhir2_top
```

## Capacity at the expected operating point

| quantity | needed | built |
|----------|--------|-------|
| Trigger memory | L1 latency 485 bins (12.125 µs) | 1024 bins |
| L1 FIFO per group | 4 ch × 2.5 MHz × 12.125 µs ≈ 121 events | 128 events (256 words) |
| L0 FIFO per group | ≈10 events at the 1 µs default L0 latency | 32 events |
| ADC per channel | 2.5 MHz × 75 ns | 13.3 M events/s (three conversions of 25 ns) |
| Primary link | 32 × 2.5 MHz × 3% ≈ 2.4 M events/s | 3.56 M frames/s per link (9 characters of 10 bits at 320 Mb/s) |

The L1 FIFO fits only on average, so fluctuations stall the L0 stage and then the channels.

`tb_workload_rate` runs this operating point at the default size:
- all 32 channels at about 2.4 MHz each, with random intervals;
- L1 accepting 1.875 % of the bins (750 kHz);
- L0 accepting 2 %;
- 250 µs of hits (about 19,000).

Both FIFOs of a group reach full. The stall is absorbed upstream by the eight buffer sets and the
digitiser queue of each channel, so no hit was lost. Every accepted event arrived on its link with
correct values.

## Design choices and differences from the published chip

- **Frame format and link framing.** The published chip's maximum output is 2.67 M events/s,
  which suggests about 12 characters per event. Here an event takes 9 characters, giving
  3.56 M frames/s.
- **Not specified by the published description**, chosen here:
  - the command protocol;
  - register width (64 bits) and field layout;
  - Resync length thresholds;
  - time-tag width (16 bits);
  - trigger memory depth and tag scheme;
  - FIFO depths;
  - the expiry rule;
  - counter encoding and period;
  - test-pulse period and length fields.
- **Register width.** The chip holds about 5,200 configuration bits, judging by its 15,558
  triplicated flip-flops; here there are 35 × 64. Fields for analog settings that are not
  modelled are carried as codes only.
- **Sub-cycle timing.** TAC1 is always started by the delayed T1 rising edge, and only TAC2's
  edge is configurable. In the chip both TDCs can use any edge.
- **Event time.** The coarse time of an event is the time tag of the clock edge that stops TAC1.
- **Analog models.**
  - The QAC model ignores the energy gain stage: the E gain code is output only.
  - The TAC model has no leakage. The refresh mechanism is still there and is tested.
- **`rx_align_mode`.**
  - 0: the command receiver realigns on every K28.5.
  - 1: it keeps the first alignment found.

  The published description names this pin without describing it.
- **Analog parts not modelled.** The pre-amplifier, DLEDs, discriminators, T1 delay, attenuator,
  analog test-pulse injector, bias/bandgap/monitor block, ALDO2 DACs and DDR pad cells. The
  top-level ports stand in their place.

## Synthesis

Every digital block synthesises on its own. The three analog models (`tac_bank`, `qac_bank`,
`sar_adc`) use real-valued signals, and the TAC model also uses `$realtime`, so they are
simulation-only. `channel` and `tofhir2_top` instantiate them, so they simulate but do not
synthesise as a whole. A netlist of the digital part would replace the three models with the
analog macros' interfaces.

## Lint notes

These warnings remain, and are explained in the files concerned:

- The behavioural models use blocking assignments in clocked processes.
- `trigger_filter` keeps an array of valid bits with an asynchronous reset.
- A few parameters and signal bits are unused in some configurations, for example spare
  register fields and the unused halves of a word.
