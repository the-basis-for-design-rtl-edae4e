# Two-channel event-by-event digital coincidence spectrometer

In a classic gamma-gamma coincidence setup, a time-to-amplitude converter
(TAC) and a coincidence unit decide in analog hardware whether two detector
pulses belong together. Only then are the energy ADCs gated. This design does
the same job digitally. Each detector channel turns every pulse into a pair
(A, t):

- A is the pulse amplitude.
- t is a time stamp: the clock cycle in which the pulse first rose above the
  channel's lower threshold.

Both channels read one shared time-stamp counter. The coincidence decision is
therefore plain integer arithmetic: two events coincide when
`dt = |t1 - t2| <= W`, where W is a coincidence window that software can
set. Every coincidence is stored as a record (A1, A2, dt). The host reads
these records as a list, ordered by event number n. This list is the
event-by-event data from which two-dimensional energy spectra and
time-difference spectra are built offline.

The architecture and the coincidence rule follow the design proposed by
Pham Dinh Khang et al. in "The basis for design of a DSP-based coincidence
spectrometer" (the block diagram in its Fig. 2). That publication describes
the system at block level. It gives no widths, no bus and no pulse-processing
algorithm. Everything at that level below is this implementation's own
choice, and each such choice is marked.

## Block structure

```
 det1_sample_i --> pulse_dsp (DSP1) --> event_latch (A1,t1) --+--> timing_tester --+
                        ^                                     |    |t1-t2| <= W ?  |
                        |  ts                                 |                    v
              timestamp_counter                               +------------> coinc_ctrl --> event_fifo --> host_if <--> host bus
                        |  ts                                 |                 (write / remove)             |
                        v                                     |                                               |
 det2_sample_i --> pulse_dsp (DSP2) --> event_latch (A2,t2) --+        thresholds, window, run, flush <-------+
```

| Module | Role |
|---|---|
| `coinc_pkg` | Widths, the event and record structs, the register map |
| `timestamp_counter` | Free-running time base at the system clock f0 |
| `pulse_dsp` | One detector channel: threshold crossing time and peak amplitude |
| `event_latch` | Holds one channel's latest event until it is paired or removed |
| `timing_tester` | `dt = |t1 - t2|`, the test `dt <= W`, and which event came first |
| `coinc_ctrl` | The coincidence decision: write the record, or remove the earlier event |
| `event_fifo` | Event memory of 1024 records, first in first out |
| `host_if` | Register interface: thresholds, window, run/flush, status, record readout |
| `coinc_spectrometer` | Top level that wires all of the above |

Everything runs on one clock. That clock is also the time-stamp clock.

## The coincidence rule

This part needs the most care to understand. Each channel has a one-event
store. An event that a channel reports goes into its store. Nothing is decided
while only one store is full. Once both are full, the timing tester compares
the two time stamps, and the controller resolves the pair in the same clock
cycle:

* **dt <= W: coincidence.** The record (A1, A2, dt) goes into the event
  memory, and both stores are emptied.
* **dt > W: no coincidence.** The **earlier** event is removed. The later
  one stays in its store and waits for the next event on the other channel.
  The next comparison is made against that event.

Rejecting only the earlier event is what makes the rule work with an event
stream. Time stamps only grow, so an event that is already more than W older
than its partner can never coincide with anything that arrives later. The
later event, however, may still be paired.

Three situations are not covered by the source. This design resolves them
as follows:

* **A second event on the same channel before the other channel fires.** The
  new event replaces the stored one. Any later event on the other channel is
  closer in time to the newer event, so the older one could never be the
  better match.
* **Both channels finish a pulse in the same clock cycle.** Both stores load
  together and the pair is resolved one cycle later, like any other pair.
* **The event memory is full when a coincidence is found.** The record is
  lost, both stores are emptied as usual, and a sticky overflow flag is set
  in the status register. Acquisition is never stalled, because the detector
  signals cannot be paused.

A store may be emptied and reloaded in the same cycle. This happens when a
new event arrives on a channel just as the controller removes that channel's
old event. The load wins, so the new event is kept.

dt is taken modulo 2^32 and read as a signed difference. Comparisons are
therefore correct across a wrap of the counter, as long as the two events are
less than 2^31 clock periods (about 27 s at 80 MHz) apart. A single event that
waits longer than that for a partner could in principle be paired wrongly with
a later one. At any real count rate this cannot happen.

The stored dt is the magnitude only: which detector fired first is not
recorded. This follows the source's definition `dt = |t1 - t2|`.

## Pulse processing in a channel

`pulse_dsp` takes one unsigned 13-bit sample per clock. The samples are
assumed to be baseline-corrected, so the baseline is near zero. The channel
has two states:

* **idle.** The first sample that is strictly greater than the threshold
  starts a pulse. The current time stamp becomes the event's t, and the
  sample starts the running maximum.
* **pulse.** Every sample above the threshold updates the maximum. The first
  sample at or below the threshold ends the pulse. On the next clock edge the
  channel sends out one event (A = maximum, t) as a one-cycle strobe.

Example, with threshold 200 and the time stamp equal to the cycle number:

```
cycle    :  10  11   12   13   14   15  16
sample   :  90 350  900 1400  700  180  40
state    :  I   I    P    P    P    P   I
event    :                             A=1400, t=11  (strobe during cycle 16)
```

The source states only what a channel must deliver: the amplitude, and the
moment at which the pulse exceeds the lower threshold. The peak search is the
simplest method that delivers it. It is the part to replace first if a real
pulse-shaping filter (trapezoidal shaping, pile-up rejection, baseline
restoration) is wanted. The interface (`ev_valid_o`, `ev_o`) can stay the
same.

The timing resolution is one clock period. The source estimates the
time-stamp error as +-1/f0: +-25 ns at 40 MHz, and +-12.5 ns, measured, at
80 MHz. The default clock here is 80 MHz. A pulse whose rise is slow,
typical for interactions at the edge of an HPGe crystal, crosses the threshold
late. This walk is not corrected.

## Host interface

The host interface is a simple synchronous register bus with a 3-bit word
address and 32-bit data.

- A write takes effect on the clock edge at which `host_wr_i` is high.
- Read data appear, with `host_rvalid_o`, one cycle after `host_rd_i`.
- Never assert `host_wr_i` and `host_rd_i` in the same cycle (an assertion
  checks this).

| Addr | Name | Access | Content |
|---|---|---|---|
| 0 | CTRL | W | bit0 run, bit1 flush (one-cycle pulse). Reading returns run in bit 0 |
| 1 | THRESH1 | R/W | channel 1 lower threshold, 13 bits, reset 0 |
| 2 | THRESH2 | R/W | channel 2 lower threshold, 13 bits, reset 0 |
| 3 | WINDOW | R/W | W in clock periods, 16 bits, reset 40 (500 ns at 80 MHz) |
| 4 | STATUS | R | bit31 overflow (sticky), bit30 memory empty, bits 15:0 records stored |
| 5 | DATA_A | R | A1 in bits 12:0, A2 in bits 28:16 of the oldest record |
| 6 | DATA_DT | R | dt of the oldest record in bits 15:0. **This read removes the record** |

To read one record, read DATA_A and then DATA_DT. Both data registers read
zero when the memory is empty, and reading them then removes nothing.

A measurement is started by writing `CTRL = 3` (run and flush). Flush does
the following:

- restarts the time base at zero;
- empties both event stores and the event memory;
- clears the overflow flag.

While run is 0, the channels ignore their inputs and abandon any pulse in
progress.

## Timing and throughput

* A channel accepts one sample every clock, so it never loses samples. Its
  dead time is the length of one pulse above threshold plus one cycle.
* An event leaves `pulse_dsp` one cycle after the pulse drops below
  threshold. It is in its store one cycle later. If the other store is full,
  the decision takes effect on the following edge. In total, a record is
  written two clock edges after the edge that took the first below-threshold
  sample of the later pulse.
* One pair is resolved per clock. Events on the same channel are at least two
  cycles apart, so the controller never falls behind.
* Draining the event memory takes two host bus cycles per record, one for
  each of the two reads. The read-data cycle of one read overlaps the
  request cycle of the next.

## Parameters and sizes

| Name | Default | Where | Origin |
|---|---|---|---|
| `F0_HZ` | 80 MHz | `coinc_pkg` | clock of the source's timing test. It is documentation only: the logic counts cycles |
| `SAMPLE_W` | 13 | `coinc_pkg` | own choice: 8K amplitude channels, like the energy ADCs of the analog system this replaces |
| `TS_W` | 32 | `coinc_pkg` | own choice: about 53 s before the counter wraps at 80 MHz |
| `DT_W` | 16 | `coinc_pkg` | own choice: window and dt up to 65535 periods (819 us) |
| `DEFAULT_WINDOW` | 40 | `coinc_pkg` | 500 ns, the time range of the source's reference measurement |
| `FIFO_DEPTH` / `DEPTH` | 1024 | top / `event_fifo` | own choice, power of two |

The reference measurement in the source used 60Co (about 20 kBq) and 137Cs
(about 100 kBq) with a 500 ns range. This configuration fits it easily.

- The window is 40 of the 65535 periods available.
- Energies up to about 1500 channels fit in 13 bits.
- Even at 120 k events/s, a channel sees a pulse only about every 670
  clocks.

The coarse time binning is the real limit. 500 ns is only 40 bins at 12.5 ns,
where the analog TAC gave thousands of channels.

## What is not here

* **Detectors, analog front end and digitisers.** They are outside the
  design. The top takes digitised samples as ports.
* **The "Pulser"** drawn next to the two DSPs in the source's block diagram.
  Its role and signals are not described, so it is not connected.
* **The PC and its bus.** The source's analog system used a PCI card. Here
  the host sees only the generic register bus above.
* **The filtered-timing variant.** The source also sketches a variant in
  which each detector's timing output passes through a filter, to remove
  slow-rising pulses, and then through its own timing DSP (four DSPs in all).
  That variant also removes unpaired amplitudes. It is an alternative to the
  configuration built here and is not implemented.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself by watchdog if it hangs.

| Testbench | What it checks |
|---|---|
| `tb_timestamp_counter` | count from reset, clear, resume |
| `tb_pulse_dsp` | random pulses, some with a second bump, plus sub-threshold noise. Amplitude, t and the exact cycle of every event, against a scan of the sample list. Enable dropped mid-pulse |
| `tb_event_latch` | random load/clear against a one-entry reference, including load+clear and overwrite |
| `tb_timing_tester` | random pairs, window edges (dt = W and W+1), counter wrap, saturation |
| `tb_coinc_ctrl` | all input combinations against the two-case rule, full memory, flush |
| `tb_event_fifo` | random traffic against a queue at depth 1024, full, empty, clear |
| `tb_host_if` | register map, reset values, flush pulse, record readout and pop, sticky overflow |
| `tb_coinc_spectrometer` | the whole design at its default parameters (see below) |

The end-to-end testbench builds two sample streams of triangular pulses on
noise. The pulses are arranged in these cases:

- pairs inside the window;
- pairs exactly at the window edge and one period beyond it;
- pairs far outside the window;
- lone pulses;
- double pulses on one channel;
- pulses that end on both channels in the same cycle.

An independent event-level model predicts the record list from the sample
streams alone. The testbench reads the records back over the host bus and
compares them one by one. A second phase sends 1084 coincidences into the
1024-entry memory. The first 1024 records must survive, 60 must be dropped,
and the overflow flag must be set until a flush clears it. A third phase
checks that nothing is recorded while run is off. Each mechanism must occur
at least once:

- a write;
- a rejection of channel 1 and of channel 2;
- an overwrite;
- simultaneous events;
- a coincidence exactly at the window edge;
- a drop;
- a flush.

The whole run takes a few seconds.

`tb_source_measurement` runs the design at its default parameters on two
workloads modelled on the reference measurements of the source.

**Source measurement.** This simulates 0.3 s of a 60Co (20 kBq) plus 137Cs
(100 kBq) measurement with the default 500 ns window.

- Decays arrive as a Poisson process.
- Each 60Co decay emits its 1173 and 1332 keV gammas at the same instant.
- Pulses are trapezoids in continuous time, sampled every 12.5 ns on a
  noisy baseline, so pile-up and threshold walk occur.

The detection efficiency, the photopeak fraction and the pulse shape are
assumptions of the testbench. Every record must match an independent
reference. The true 60Co cascades must appear as records that hold both
60Co photopeaks. Thousands of random pairs must be rejected.

**Delay test.** Identical pulses go to both inputs, with channel 2 delayed by
0 to 400 ns in steps of 7.3 ns. Every measured dt must be within one clock
period, 12.5 ns, of the true delay. The largest error seen is about 11 ns,
which matches the +-1/f0 estimate. The run takes about 20 s.

To simulate with Verilator, run from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    --top-module tb_coinc_spectrometer -Irtl -y rtl -y tb \
    rtl/coinc_pkg.sv tb/tb_coinc_spectrometer.sv -o sim
./obj_dir/sim
```

Replace the testbench name to run any other. All RTL is synthesizable
SystemVerilog-2017. The event memory is a plain array with one write port and
one asynchronous read port, which maps to distributed RAM in an FPGA. For
block RAM, register the read and add a cycle to the readout path.
