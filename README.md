# Front-end event processing for nuclear imaging detectors: a timestamp sorter and a pulse-analysis chain

Data acquisition for PET scanners and similar detector systems has to reduce
a torrent of digitised pulses to a few numbers per event, and has to put
events from many channels into time order before coincidences between them
can be found. This RTL implements two such real-time modules, written for an
FPGA but free of vendor primitives:

* **`ts_sorter`**, a very small front-end sorter. It takes time-stamped
  events that arrive *almost* in order and releases them *exactly* in order.
  It holds 100 events in a single memory and handles one event every 100
  clocks.
* **`cid_pipeline`**, the first four stages of a crystal identification
  module. It analyses 36-word ADC pulse records at one record every 36
  clocks. The four stages are baseline correction, peak search with
  interpolation, normalisation and phase (timing) identification.

`hep_fe_top` places the two side by side on one clock. They share no data.

The sorter's sweep is the least obvious part of the design, so most of the
room below goes to it.

---

## 1. The timestamp sorter

### 1.1 Idea: a memory used as a shift register

A sorted list of `DEPTH` events lives in one dual-port memory. When a new
event has to go in, the memory is swept once, one address per clock, from the
oldest entry to the youngest. A register called the **carry** travels with the
sweep. At the start it holds the new event. At each address:

```
stored = mem[a]
if carry goes before stored:   mem[a] <= carry ; carry <= stored
else:                          mem[a] <= stored            (carry unchanged)
```

Entries older than the new event are rewritten unchanged. At the first entry
that is younger, the new event drops in and that entry moves into the carry.
From then on every entry moves up by one slot, because the carry always holds
the entry that the previous slot pushed out. One sweep inserts one event and
shifts everything after it, so the memory behaves like a shift register with
an insertion point. The cost is a single comparator and a single carry
register, whatever the depth. The price is an event interval equal to the
depth: **`DEPTH` clocks per event**.

Example with `DEPTH = 5`, holding `[10 12 15 -- --]`, inserting 13:

| clock | address | stored | carry before | written | carry after |
|------:|--------:|-------:|-------------:|--------:|------------:|
| 0 | 0 | 10 | 13 | 10 | 13 |
| 1 | 1 | 12 | 13 | 12 | 13 |
| 2 | 2 | 15 | 13 | 13 | 15 |
| 3 | 3 | empty | 15 | 15 | empty |
| 4 | 4 | empty | empty | empty | empty |

The result is `[10 12 13 15 --]`.

Once the carry has taken a stored entry, that entry is always written into
the next slot. It is not compared again. This is what keeps events with equal
timestamps in arrival order: an entry is never swapped with an equal one
behind it. The new event itself is compared strictly (`<`), so it goes behind
any stored event with the same timestamp.

### 1.2 Circular operation and release

The list is not pinned to address 0. A `head` pointer marks the oldest entry,
and the list runs upward from there, wrapping at `DEPTH`.

* **Filling** (fewer than `DEPTH` events held): the sweep covers
  `head … head+DEPTH-1`. The list grows by one.
* **Full** (a new event arrives while `DEPTH` are held): the oldest event
  must leave. The sweep starts one slot after the head and ends on the old
  head slot. That slot is treated as empty, since the entry it holds is the
  one leaving. The last read of the sweep returns that entry, and it is
  released on `out_*`. `head` then advances by one. The freed slot has
  become the tail of the list, and nothing has been copied to make room.
* **Flush** (no event offered, `flush` high): a full-style sweep with an
  empty carry. It releases one event per sweep until the memory is empty.

The memory holds no valid bits. A slot counts as empty when its position in
the sweep is at or beyond the fill count, so the memory needs no reset and
maps onto a plain block RAM.

### 1.3 Timing

* The sweep has two stages. Stage 0 issues the read address. Stage 1 gets the
  data one clock later, compares it with the carry and writes back to the same
  address.
* Sweeps run back to back. The next sweep reads slots the previous one
  finished with long before, so there is no gap.
* `in_ready` is high in the last address clock of a sweep, and all the time
  when idle. Offered continuously, events are accepted exactly every `DEPTH`
  clocks.
* An event is released `DEPTH + 2` clocks after the accepting clock of the
  sweep that releases it.
* Output has no back-pressure: `out_valid` is a one-clock pulse.

Default sizes are `DEPTH = 100` (the reference depth, giving an interval of
100 clocks), `TS_W = 32` and `DATA_W = 16`. Timestamps are compared as plain
unsigned numbers. Wrap-around of the timestamp counter is not handled, so
`TS_W` must be wide enough for a run.

The sorter cannot fix an event that arrives later than `DEPTH` younger
events. By the time it arrives, the older events it should precede may
already have been released. Size `DEPTH` for the worst disorder expected
from the front end.

---

## 2. The crystal identification chain

### 2.1 Event format and stream

A detector pulse is digitised into a record of **36 ADC words of 16 bits**.
The record starts with a few pre-trigger words. Records enter one word per
clock, with `in_first` marking word 0, and may follow each other without a
gap. Between stages, a record travels as a stream of `cid_pkg::sample_t`:
`first`, `last` and a signed 18-bit word. There is no back-pressure anywhere.
Each stage keeps up with one word per clock and one record per 36 clocks.

### 2.2 Stages

| stage | module | what it computes | how |
|---|---|---|---|
| 1 | `cid_baseline` | `b = floor(mean(raw[0..7]))`, `c[i] = raw[i] - b` | two-bank frame memory: a record is written whole, then read back with `b` subtracted while the next one fills the other bank |
| 2 | `cid_peak` | largest `c[i]` (`y0`, index), its neighbours `ym`, `yp`; `A = y0 + (yp-ym)^2 / (8(2y0-ym-yp))` | running search as the record streams past; one division per record (18-clock iterative divider) |
| 3 | `cid_normalize` | `n[i] = sat((c[i] * floor(2^30/A)) >>> 16)`, about `c[i]/A` with 1.0 = 2^14 | four-record frame memory, because `A` is known only after the record has passed; one 31-clock division per record, one multiply per word |
| 4 | `cid_phase` | first `i` with `n[i] >= 0.5`; `t_half = (i-1) + (0.5-n[i-1])/(n[i]-n[i-1])`, 6 fractional bits | running search, 6-clock division |

Stage 2 fits a parabola through the largest word and its two neighbours and
takes the parabola's maximum. This corrects the amplitude for a peak that
falls between two samples. Stage 4 works on the normalised pulse, so its
half-height crossing is a constant-fraction time pick that does not depend on
pulse height. The fractional part of `t_half` is the phase of the pulse
relative to the sampling clock.

Edge cases:

* **Peak at word 0 or 35:** the missing neighbour is taken equal to the
  peak.
* **Flat top:** no correction is applied.
* **Peak not above baseline:** gives `A = 0`. Normalisation then treats `A`
  as 1, so the normalised words saturate.
* **No word reaches half:** gives `crossed = 0`.
* **Word 0 already above half:** gives `t_half = 0`.
* **A word exactly at half:** gives `t_half = i` without a division.

Stages 2 to 4 each contain an instance of `cid_divider`, an unsigned
restoring divider. It has one quotient bit per clock and is sized so that each division fits in the
36-clock event interval.

`cid_pipeline` chains the four stages. Two small FIFOs (`sync_fifo`) hold
each record's baseline and peak results until its phase result arrives. One
record `cid_pkg::cid_result_t` then leaves per event, holding `baseline`,
`peak_idx`, `amplitude`, `crossed` and `t_half`.

The latency from the last raw word to the result is **141 clocks**, and the
interval is **36 clocks**. The normalised stream is also an output
(`norm_valid`/`norm`).

### 2.3 What the chain does not do

A complete crystal identification module continues with two more stages: a
Wiener-filter multiply-accumulate and a Wiener-filter matrix inversion. Their
output decides which crystal of the detector block the pulse came from. Those
stages are **not** included: their filter structure, coefficients and
decision rule are outside this design. The chain therefore stops at the
normalised, time-located pulse, and the normalised stream is brought out for
such a stage. For the same reason its latency is shorter than that of a full
module (141 clocks, against about 250 for a full one).

---

## 3. How far to trust it

What follows the reference description:

* **Sorter:**
  * a single memory used as an iterative shift register;
  * events inserted one by one at their chronological place;
  * circular memory;
  * a depth of 100 events;
  * an event interval equal to the depth.
* **Chain:**
  * the four stages, in their order;
  * 36-word, 16-bit events;
  * a 36-clock event interval.

What is this design's own choice:

* **Sorter:**
  * the release-when-full policy and `flush`;
  * the handshake;
  * all widths;
  * the two-stage pipeline;
  * the order of ties.
* **Chain:**
  * the algorithm inside every stage: 8-word pre-trigger mean, parabolic
    peak, reciprocal-and-multiply normalisation, half-height linear
    interpolation;
  * every fixed-point format: 18-bit signed stream, normalised 1.0 = 2^14,
    6 phase bits;
  * the frame memories and the dividers.

These choices are the simplest ones that do what each stage is named for. A
real detector chain may differ in every arithmetic detail.

Verification:

* Every module has a self-checking testbench. It compares the module's output
  with values the testbench works out from the formulas above.
* Each testbench checks the stated latencies and intervals cycle by cycle.
* `tb_hep_fe_top` runs both paths at the default sizes: 400 events through
  the 100-deep sorter and 80 pulse records through the chain. It counts each
  mechanism and fails if any never happened:
  * sorter: fill sweeps, releases when full, flush releases, insertion ahead
    of younger events, ties, input stalls, head wrap-around;
  * chain: back-to-back and gapped records, interpolation corrections,
    normalisation saturation, records with no crossing and records above half
    from word 0.
* Concurrent assertions in the RTL flag handshake and sizing violations:
  * a valid entry lost at the end of a sorter sweep;
  * divider overflow;
  * records arriving faster than a stage's division;
  * frame-memory overrun;
  * result FIFOs out of step.

Nothing has been run on an FPGA, and no timing closure has been attempted.

---

## 4. Files

| file | contents |
|---|---|
| `rtl/cid_pkg.sv` | event length, widths, `sample_t`, `cid_result_t` |
| `rtl/ts_sorter.sv` | sorter |
| `rtl/cid_baseline.sv`, `cid_peak.sv`, `cid_normalize.sv`, `cid_phase.sv` | chain stages 1–4 |
| `rtl/cid_divider.sv`, `rtl/sync_fifo.sv` | helpers |
| `rtl/cid_pipeline.sv` | chain of stages 1–4 |
| `rtl/hep_fe_top.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/cid_model_pkg.sv` | reference model of the chain and a pulse generator |

## 5. Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/cid_pkg.sv tb/cid_model_pkg.sv tb/tb_hep_fe_top.sv \
    --top-module tb_hep_fe_top -o sim
./obj_dir/sim
```

Replace `tb_hep_fe_top` with any other testbench, such as `tb_ts_sorter` or
`tb_cid_pipeline`. Each testbench ends with a line
`TB_RESULT checks=N failures=M`. The simulator is two-state, so everything
that is read is reset or written before use. The sorter memory needs no
reset (see 1.2). The frame memories are always written before they are read.

To change sizes:

* **Sorter depth:** set `SORT_DEPTH` on `hep_fe_top`, or `DEPTH` on
  `ts_sorter`. It must be at least 3, and the interval follows it.
* **Record length and pre-trigger length:** set them in `cid_pkg`.
  `BL_N` must be a power of two.
* **Divider widths:** set them as parameters of each stage. Keep each
  division shorter than the record length, or the stage's assertion will
  fire.
