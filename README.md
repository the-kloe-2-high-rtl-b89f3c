# HET acquisition FPGA: a 625 ps multi-hit TDC gated by the KLOE trigger

Two-photon events at the DAPHNE collider leave the scattered electron and positron slightly off
their nominal orbits. A High Energy Tagger station sits behind a dipole on each arm, 11 m from
the interaction point. Each station is a row of 28 small scintillators placed at different
distances from the beam, plus one long counter used for coincidences. Which scintillator fires
gives the displacement of the lepton. When it fires tells which bunch crossing it came from.
Bunches cross every 2.7 ns, so the time must be measured in steps well below that.

This RTL is the digital part of the acquisition board. The board takes 32 discriminated detector
signals and does three things:

- it measures the time of each leading edge in 625 ps bins, relative to the machine's revolution
  fiducial;
- it keeps only the hits that arrive while the KLOE trigger is asserted;
- it hands them to the experiment's data acquisition over VME.

One hit per channel can be recorded every 2.5 ns, which is faster than the bunch spacing.

The original board does this in a Virtex-5 FPGA. Only the figures that define the job come from
the original design: 32 channels, 625 ps bins, one sample every 2.5 ns, timing against the
fiducial, storage gated by the trigger, and VME readout. The internal structure described here
is one simple way to meet them. Each departure is listed in the section "What is fixed and what
was chosen".

## Data path

```
tdc_in[31:0] --> tdc_sampler --> tdc_edge_finder --(hit, fine)-------------+
fiducial_in  --> tdc_sampler --> tdc_edge_finder --> tdc_timebase --(base)--+
trigger_in   --> sig_sync ----------------------------(level, rise)---------+--> event_gate
                                                                                   | frame (128 b)
                                                         event_fifo (1024 frames) <+
                                                                | show-ahead
VME bus  <--------------------------------------------> vme_slave (A24/D32, registers)
```

| module | role |
|---|---|
| `het_pkg` | widths, the `frame_t` frame layout, the VME register offsets |
| `tdc_sampler` | samples one input at four phases 625 ps apart and moves them into the 400 MHz domain |
| `tdc_edge_finder` | finds the first leading edge of each 2.5 ns period and gives its 2-bit bin |
| `tdc_timebase` | coarse period counter; keeps the time of the latest fiducial; gives each period's time since that fiducial |
| `sig_sync` | two-flop synchroniser with rising-edge pulse (trigger, VME strobes) |
| `event_gate` | packs one period's hits into a frame, stores it only while enabled and triggered, numbers triggers |
| `event_fifo` | frame buffer; drops and counts frames when full |
| `vme_slave` | VME slave: board address decode, control/status registers, frame readout |
| `het_acq_top` | connects 32 + 1 TDC channels and the rest |

## How a time is measured

This is the part that needs the most care.

**Sampling instants.** `clk0` and `clk90` are two 400 MHz clocks, with `clk90` 625 ps late.
Every input is sampled at four instants per 2.5 ns period:

| bin | clock edge | delay after the rising edge of `clk0` |
|---|---|---|
| 0 | rising `clk0` | 0 ps |
| 1 | rising `clk90` | 625 ps |
| 2 | falling `clk0` | 1250 ps |
| 3 | falling `clk90` | 1875 ps |

Number the instants j = 0, 1, 2, … from some rising edge of `clk0`. Period n then holds the
instants 4n … 4n+3. On the next rising edge of `clk0`, `tdc_sampler` takes all four samples of
the period into the `clk0` domain together. Bit k of its output is the sample at instant 4n+k.

**Edge finding.** `tdc_edge_finder` sees a leading edge at instant j when sample j is 1 and
sample j−1 is 0. It keeps the last sample of the previous period so that an edge at bin 0 is not
missed. The first edge of a period is reported as `hit` with `fine = j mod 4`. Because this is
done every period, each channel is a multi-hit TDC: in principle every 2.5 ns period can carry a
hit. Two consequences follow:

- A second edge inside the same period is not reported. For that, the pulse plus the gap after
  it must be shorter than 2.5 ns.
- A pulse narrower than 625 ps may fall between two instants and be missed.

**Reference to the fiducial.** The revolution fiducial goes through a 33rd channel of exactly the
same kind. `tdc_timebase` counts periods with a 14-bit counter. When the fiducial channel reports
an edge, it stores that time as `{period count, fine}`. For the current period it outputs

    period_base = 4 * (period count) - stored fiducial time      (mod 2^16)

A hit found in this period at bin f therefore lies `period_base + f` bins after the fiducial.
This equals j(hit) − j(fiducial) exactly, because the hit and the fiducial pass through
pipelines of identical length, so the latency cancels.

If the fiducial and a hit fall in the same period, the new fiducial is used for that hit at once
(bypass). The result can then be slightly "negative" (a large number modulo 2^16) when the hit
precedes the fiducial inside the period. The 16-bit time covers 40.96 µs, against a DAPHNE
revolution of about 325 ns.

**Worked example.** Say the fiducial edge arrives 300 ps after instant 4·100+1.

- The first sample that sees it high is instant 402. The fiducial channel stores
  `{100, 2}` = 402.
- A detector edge then arrives 100 ps after instant 4·130+3. It is first seen at instant 524 =
  4·131+0, so its channel reports `hit` in period 131 with `fine = 0`.
- For period 131, `period_base` = 524 − 402 = 122, and the stored time is 122 + 0 = 122 counts.

The true distance is 122 × 625 ps − 200 ps. The result always lies within one bin of the truth.
The error comes from quantising both edges.

**Timing summary.** A hit in period n appears at the edge finder's output at the end of period
n+1. It reaches the buffer (`frame_we`) one clock later. The `clk0` flops of `tdc_sampler` are
where the asynchronous input first meets the clock; as in any sampling TDC, there is no further
synchroniser. The sampling phases are only as good as the clock manager and the input routing
that make them. An FPGA implementation needs placement constraints for the four sampling flops
of each channel.

## Trigger gate and frames

The KLOE trigger is synchronised with two flops. `event_gate` treats it as a level gate: a
period's hits are stored only if

- acquisition is enabled in the control register,
- the synchronised trigger is high, and
- at least one channel has a hit in that period.

Each rising edge of the trigger, while enabled, starts a new event and raises the event number
by one. Frames of that same clock already carry the new number. The trigger is applied two clocks
after it is sampled. Hits of a period are gated in the clock after that period. The trigger
therefore has to be aligned with the hits by the trigger logic that drives it. The design adds no
programmable latency or window.

A frame holds every hit of one 2.5 ns period (`frame_t`, 128 bits). It is read over VME as four
32-bit words:

| word | bits | content |
|---|---|---|
| 0 | 31:16 | event number (trigger count since clear) |
| 0 | 15:0 | `period_base`: start of the period minus the fiducial, in 625 ps units |
| 1 | 31:0 | hit mask, bit c = channel c |
| 2 | 31:0 | 2-bit bins of channels 31…16 (channel 31 in bits 31:30) |
| 3 | 31:0 | 2-bit bins of channels 15…0 (channel 0 in bits 1:0) |

Time of channel c = word0[15:0] + bin c, modulo 2^16. The bins of channels without a hit are 0.

## Buffer and VME access

`event_fifo` holds 1024 frames (128 Kbit, one block-RAM-sized memory). It shows the oldest frame
without a read delay. When the buffer is full, new frames are dropped: a sticky overflow flag is
set and a 16-bit lost-frame counter counts them.

`vme_slave` answers single D32 cycles (both data strobes low) with address modifiers 0x39 or
0x3D. A23…A16 must equal the 8-bit `board_addr` (two hex switches on the board); A15…A2 select
the register. The bus strobes are synchronised to the 400 MHz clock. Address, AM, WRITE and data
are sampled while the strobes are held.

A cycle runs IDLE → ACCESS → ACK:

- ACCESS performs the register action exactly once.
- ACK drives DTACK low and enables the data transceivers on reads. It lasts until the master
  releases the data strobes.

DTACK follows the strobes by about 4 clocks (10 ns). A cycle addressed to another board is sat
out in a SKIP state until its strobes go away. Without this, the next cycle's address, which a
master may place while the synchronised strobes still lag, could be taken for a new access.

| offset | access | content |
|---|---|---|
| 0x00 CTRL | rw | bit 0 acquisition enable. Writing 1 to bit 1 gives a one-clock clear of the buffer, its flags and the trigger counter |
| 0x04 STATUS | r | bit 0 empty, bit 1 full, bit 2 overflow, bit 3 fiducial seen, bits 31:16 frames in the buffer |
| 0x08 DATA | r | next word of the oldest frame. The frame leaves the buffer after its 4th word. Reads 0xFFFFFFFF when the buffer is empty |
| 0x0C EVENTS | r | trigger count |
| 0x10 LOST | r | frames dropped on a full buffer |
| 0x14 FIDS | r | fiducials seen |

Other offsets inside the window read 0 and ignore writes.

Readout sequence:

1. Read STATUS.
2. Read DATA 4 × (frames in buffer) times.
3. Optionally, read EVENTS/LOST.

## Clocks, reset and what stays outside

Everything runs on `clk0` (400 MHz), except the three sampling flops on `clk90` and on the
falling edges. Reset `rst_n` is asynchronous and active low. The RTL leaves out these parts of
the board, and the ports stand in for them:

- the clock manager that makes `clk0` and `clk90`;
- the LVDS input buffers: `tdc_in`, `fiducial_in` and `trigger_in` are their single-ended
  outputs;
- the VME bus transceivers, driven by `vme_data_o`, `vme_data_oe` and `vme_dtack_n`.

The front-end amplifiers, the discriminators, their threshold setting and the slow-control board
are analog or separate hardware.

## What is fixed and what was chosen

Taken from the original board:

- 32 TDC channels;
- 625 ps bins, with data acquired every 2.5 ns;
- times measured against the DAPHNE fiducial;
- storage only while the KLOE trigger is asserted;
- readout over VME;
- an 8-line hex-switch setting on the board, used here as the VME base address.

Chosen here:

- four-phase sampling on two clocks, and one hit per channel per period;
- timing the fiducial with its own TDC channel;
- a 14-bit coarse counter and 16-bit times;
- the level-gate reading of the trigger;
- the frame format, the 1024-frame buffer and drop-on-full;
- the A24/D32 address decode and the register map.

Departures and gaps:

- The original is said to have a resolution "of the order of 500 ps", while its measured spectra
  use 625 ps bins. This design uses 625 ps.
- The original board has six inputs/outputs for machine and trigger signals. Only two are used
  here: the fiducial and the trigger. The functions of the others, and of the board's custom and
  fast outputs, are not known, so they are not built.
- The board also carries SRAM, DDR2, flash, I2C memory, Ethernet, USB, RS232 and an optical
  link. None of them is used here, because their role in this acquisition is not known.
- Nothing corrects for differential non-linearity between the four phases.

## Size

Yosys coarse synthesis of `het_acq_top`, defaults, memory kept as a memory cell:

- 903 word-level cells;
- 704 flip-flop bits;
- 131072 memory bits.

## Verification

Each module has a self-checking testbench in `tb/`. It compares the module with a reference
worked out independently and ends with a `TB_RESULT checks=… failures=…` line.

| testbench | what it checks |
|---|---|
| `tb_tdc_sampler` | random input pattern with edges 300 ps after each instant; every period's four samples |
| `tb_tdc_edge_finder` | random dense and sparse sample streams; hit and bin of the first edge, including edges across period boundaries |
| `tb_sig_sync` | synchronised level and edge pulse against the tb's own samples |
| `tb_tdc_timebase` | `period_base` every clock over a counter wrap, fiducials in random bins, bypass |
| `tb_event_gate` | gating by enable and trigger, event numbering, clear, every frame field |
| `tb_event_fifo` | queue reference for data, level, full/empty, overflow and lost count, clear (depth 16) |
| `tb_vme_slave` | bus-master model: registers, enable/clear, 4-word frame readout and pop, empty marker, other board and other AM get no DTACK |
| `tb_het_acq_top` | whole design at default size, described below |
| `tb_bunch_spectrum` | bunch-crossing spectrum through the whole design, described below |

**`tb_het_acq_top`** runs the whole design at its default size (32 channels, 1024 frames). It
has two phases:

- About 550 frames come from random pulses on all channels, 12 trigger windows and a fiducial
  every 325 ns. A 20-period burst on one channel exercises the full 2.5 ns hit rate, and three
  hits fall in the same period as a fiducial. Every frame is read over VME and compared with the
  time worked out from the pulse schedule.
- A long window with 1100 frames overflows the buffer. The first 1024 frames, the overflow flag
  and the lost count are checked.

The test counts each mechanism and fails if one never happens. The mechanisms are: gated hits,
multi-hit, bypass, overflow, empty marker and clear. It takes a few seconds.

**`tb_bunch_spectrum`** places hits on channel 0 at one of ten bunch crossings 2.7 ns apart,
81 ns after the fiducial, with ±150 ps jitter. It checks every stored time exactly and checks that
the counts of neighbouring bunches do not overlap. It prints the histogram: peaks every 4.3
counts between 130 and 170.

Each testbench passes. Each also fails when a fault is put into its module (for example, swapped
sampling phases, a missing bypass, or a pop after the third word).

To run one with Verilator 5 (the testbenches need `--timing`, and use a 1 ps time unit):

```
verilator --binary --timing --assert -Irtl rtl/het_pkg.sv rtl/*.sv tb/tb_het_acq_top.sv \
          --top-module tb_het_acq_top -Mdir obj && ./obj/Vtb_het_acq_top
```

Replace the testbench name to run another. The RTL is plain synthesizable SystemVerilog. The only
simulation-only constructs are two concurrent assertions: no pop of an empty buffer, and DTACK
only inside a cycle.

## Changing it

- `het_pkg` holds the channel count `N_CH`, the counter width `COARSE_W` and the event-number
  width. The frame layout and the VME word count follow from them. With a channel count other
  than 32, the four-word readout order in `vme_slave` must be revisited.
- `FIFO_DEPTH` on `het_acq_top` sets the buffer size.
- A finer bin needs more sampling phases. That means wider samples in `tdc_sampler` and
  `tdc_edge_finder`, and `N_PHASE` in `het_pkg`.
