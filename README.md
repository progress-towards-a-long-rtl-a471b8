# A sparse, power-cycled back end for the LSTFE silicon-strip front end

Silicon microstrip trackers for a linear collider see beam in short bursts. The
ILC delivers a 1 ms pulse train five times a second, so the readout is needed
for only 0.5 % of the time. If the front-end chips are switched off between
trains, the tracker needs no active cooling, which saves material in front of
the calorimeters. The LSTFE ("long shaping-time front end") chips follow that
plan. Each strip has a charge amplifier with a 3 us shaper and two
comparators. One has a high threshold, set so that noise fires it only about
once per thousand strips. The other has a low threshold. It is meant for the
small signals that a particle leaves on the strips next to the one it crossed,
which sharpen the cluster centroid.

This RTL is a digital back end for one such chip, written for an FPGA. The
main idea is that the low threshold is read out only where the high threshold
says a real hit is nearby. Everywhere else, low-threshold pulses are treated as
noise and thrown away. For every pulse it keeps, the back end writes one
record: the channel, and the times of the leading and trailing edges. Records
from all channels go into one FIFO. After the train, the FIFO is read out as a
stream and the front end is switched off until the next train.

The published description of this back end says what it does, not how it is
built. It enables the low threshold near high-threshold hits, stamps leading
and trailing edges, keeps one FIFO per chip, reads out after the train and
power-cycles the front end. The block split, the clocking, the word formats,
the handshakes and the sizes are all choices made for this implementation.
The section "What is taken from the design and what is chosen here" lists
them.

## Signal flow

```
 comp_hi[N] ──► comp_sync ──hi──► neighbor_enable ──en──┐
 comp_lo[N] ──►  (2-flop,  ──lo, lo_rise, lo_fall──────►├─► hit_capture ──pend,lead,trail──► hit_arbiter
                  edges)                                │    (per channel)  ◄──grant──────    (round robin)
                                 ts_counter ──ts───────┘                                           │
                                     ▲                                                  {chan,lead,trail}
                                     │ clear / run                                                 ▼
 power_req, train_gate ──► train_controller ──acquire────────────────────────────────────►     hit_fifo ──► out_* stream
                                     │  └──readout_en─────────────────────────────────────────────►   (valid/ready)
                                     └──► fe_power_on (to the front-end chip)
```

All of this is in `lstfe_backend`, the top module. It has one clock domain. The
comparator outputs are the only asynchronous inputs.

## Which low-threshold pulses are kept

This is the subtle part of the design. Take a particle that crosses strip 4
and leaves a little charge on strips 3 and 5. All three shaped pulses have the
same shape and peak together, about one shaping time after the crossing. They
differ only in height:

```
 strip 4 comp_lo   ____/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\____
 strip 4 comp_hi   _________/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\___________
 strip 5 comp_lo   _______/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\________
                          ^ leading edge of strip 5, before any high crossing
```

Strip 5's low-threshold leading edge comes before strip 4 crosses the high
threshold. So the back end cannot decide at the leading edge whether strip 5
is wanted. `hit_capture` therefore always notes the leading-edge time. While
the pulse lasts, it remembers whether the enable was ever high. The enable is
the OR of the high-threshold levels within `RADIUS` strips, the strip itself
included. The decision is made at the trailing edge:

* If the enable was seen at any cycle from the leading edge to the trailing
  edge, both included, the pulse becomes a pending record
  {leading, trailing}.
* Otherwise the pulse is discarded.

A strip that itself crosses the high threshold is always enabled, because
`RADIUS` includes the strip itself. An isolated low-threshold noise pulse is
never enabled.

Some edges of the rule:

* Only pulses that both start and end inside the acquisition window are
  recorded. A pulse that is still high when the train ends is dropped.
* The enable test uses the synchronized high-threshold levels. A high crossing
  shorter than one clock period can be missed. With a 3 us shaper and a 337 ns
  clock this does not happen for real signals.
* Two pulses on one strip that overlap in time merge into one comparator
  pulse, and so into one record. The comparator output cannot tell them apart.

## Time stamps and the record

The back-end clock is assumed to run at the ILC bunch spacing of 337 ns.
`ts_counter` restarts at zero in the first cycle of each train and counts
clock ticks, so one time-stamp unit is one bunch crossing. A 1 ms train is
2968 ticks, and 12 bits cover it. If a train runs longer, the counter wraps
and the sticky `ts_wrapped` flag is set.

Both comparator levels pass through a two-flop synchronizer, so every stamp is
the true edge time plus two ticks. That offset is the same for every edge.
Pulse widths (trailing minus leading) are therefore exact to within the
sampling, and they carry the pulse-height information (time over threshold).

A record is the packed struct `{chan, lead, trail}`. For 8 channels that is
3 + 12 + 12 = 27 bits. For 128 channels it is 7 + 12 + 12 = 31 bits.

## Sharing one FIFO among the channels

Each channel has a one-entry slot for a finished record. `hit_arbiter` grants
one pending slot per clock, round robin, and the granted record is written
into `hit_fifo`. Neighbouring strips of a cluster often end in the same clock,
so this arbitration does happen in practice. A record waits at most `N_CHAN`
clocks. A pulse is at least two clocks long, so a slot is normally free again
long before its channel finishes another pulse.

Records are never stalled. They are dropped and counted instead:

* `lost_count` counts records that found their channel's slot still occupied.
  This needs pathologically short pulses.
* `overflow_count` counts records that found the FIFO full. The FIFO keeps the
  oldest 512 records and refuses the rest.

Both counters saturate at 16 bits. Neither is cleared between trains, so a
reader can difference them between trains.

## The pulse-train cycle

`train_controller` runs the chip through one cycle per train:

| state   | `fe_power_on` | what happens | leaves when |
|---------|---------------|--------------|-------------|
| OFF     | 0 | front end unpowered | `power_req` or `train_gate` rises → SETTLE |
| SETTLE  | 1 | waits `SETTLE_CYCLES` for the front end's bias levels to recover | count done → READY; `train_gate` first → ACQUIRE, with `early_train` set |
| READY   | 1 | waiting for the train | `train_gate` → ACQUIRE |
| ACQUIRE | 1 | time stamps run from 0; hits are recorded | `train_gate` falls → READOUT |
| READOUT | 0 | FIFO offered on `out_*` | FIFO empty and no slot pending → OFF |

The prototype chip was measured to need about 25 ms after power-up to reach
its operating point. The target is below 1 ms. The default `SETTLE_CYCLES` of
74184 is 25 ms at 337 ns. For a chip that meets the 1 ms target it would be
2968.

A train that arrives during SETTLE is still recorded, but `early_train` marks
its data as taken before the front end had settled. The flag stays set until
a train begins from READY.

## Interface of `lstfe_backend`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock (337 ns assumed); asynchronous reset, active low |
| `comp_hi`, `comp_lo` | in | N_CHAN | comparator outputs of the front-end chip, asynchronous |
| `power_req` | in | 1 | a train is coming: start powering up |
| `train_gate` | in | 1 | high for the duration of the train |
| `fe_power_on` | out | 1 | power-cycling control line to the front end |
| `out_valid`, `out_ready` | out, in | 1 | stream handshake; a record moves when both are high at a clock edge |
| `out_chan`, `out_lead`, `out_trail` | out | clog2(N_CHAN), TS_W, TS_W | the record |
| `state` | out | 3 | `lstfe_pkg::train_state_e` |
| `early_train`, `ts_wrapped` | out | 1 | data-quality flags of the last train |
| `fifo_level` | out | clog2(DEPTH)+1 | records held |
| `overflow_count`, `lost_count` | out | 16 | dropped-record counters |

`out_valid` is high only in READOUT. Once raised, it holds the same record
until the record is taken. An assertion in the top checks this. With
`out_ready` tied high the FIFO drains at one record per clock. At 337 ns that
is about 80 Mbit/s, so a full FIFO empties in 173 us.

Latency: from a comparator edge at the pin to its time stamp, 2 clocks. From
the trailing edge to a pending record, 3 clocks. From pending to the FIFO, 1 to
N_CHAN clocks.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `N_CHAN` | 8 | channels of the LSTFE2 prototype (the full chip is planned with 128) |
| `TS_W` | 12 | chosen: covers 1 ms at 337 ns |
| `RADIUS` | 1 | chosen: "vicinity" taken as the nearest neighbours |
| `DEPTH` | 512 | chosen: holds even the projected 128-channel load (below); a power of two |
| `SETTLE_CYCLES` | 74184 | the measured 25 ms turn-on at 337 ns |

The defaults live in `lstfe_pkg`.

## Sizing against the expected load

For a 128-channel chip in the innermost barrel layer, the expected data volume
is roughly 6.5 to 8 kbit per train. That projection assumes 0.1 % noise
occupancy plus machine background, with the low threshold anywhere from a few
hundredths to about a quarter of a minimum-ionizing signal. The uncertainty
band reaches about 8.7 kbit. At 5 Hz this averages about 35 kbit/s per chip.

In 31-bit records, 8.7 kbit is at most 281 records, well inside 512. The
8-channel prototype sees about a sixteenth of that, some 20 records per train.
The whole cycle takes about 77,700 clocks: 25 ms settling, the 1 ms train and
at most 512 readout clocks. The 200 ms between trains is 593,472 clocks.

## What is taken from the design and what is chosen here

Taken from the published design:

* 8 channels per chip (128 planned)
* two comparators per channel
* low-threshold readout enabled in the vicinity of high-threshold hits
* leading- and trailing-edge time stamps
* a single FIFO per chip, read out after the 1 ms train
* power-cycling control of the front end
* the 337 ns bunch spacing, the 1 ms train, the 5 Hz repetition and the
  25 ms turn-on time

Chosen here:

* the 337 ns back-end clock and 12-bit time stamps
* the two-flop synchronizer
* the vicinity radius of 1
* deciding at the trailing edge, and dropping pulses cut by the train
  boundaries
* the one-entry slot per channel and the round-robin arbiter
* a FIFO depth of 512, and dropping records with counters on overflow
* the record layout
* the valid/ready readout stream
* the `power_req` / `train_gate` timing inputs and a single power line (the
  chip is said to have control *lines*; their number and meaning are not
  known here)
* the behaviour on an early train
* an asynchronous reset

The analog parts have no RTL here: the preamplifier and shaper, the
comparators and the on-chip power switching. They connect through
`comp_hi`, `comp_lo` and `fe_power_on`.

## Simulating

Every testbench checks itself and ends by printing
`TB_RESULT checks=<n> failures=<m>`. Each one also has a watchdog. Build and
run one with plain Verilator 5, for example the end-to-end bench:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lstfe_pkg.sv tb/tb_lstfe_backend.sv \
          --top-module tb_lstfe_backend -Mdir obj_top
./obj_top/Vtb_lstfe_backend
```

Other testbenches build the same way: replace `tb_lstfe_backend` with the
testbench's name.

| testbench | what it shows |
|-----------|---------------|
| `tb_comp_sync` | synchronizer delay and edge pulses against a delay-line reference |
| `tb_ts_counter` | clear/run/wrap against a reference count (4-bit instance) |
| `tb_neighbor_enable` | all 256 patterns, radius 1 and 2 |
| `tb_hit_capture` | random pulses, enables and grants; records, suppression and lost-record count |
| `tb_hit_arbiter` | round-robin order; equal service when all channels are pending |
| `tb_hit_fifo` | random traffic against a queue; overflow and drop count (16-word instance) |
| `tb_train_controller` | state sequence, exact settling count, `ts_clear` placement, early train |
| `tb_lstfe_backend` | the whole back end at default sizes, three trains (normal, overflowing, early), random back-pressure |
| `tb_workload_fig2` | a 128-channel build under the projected 7 kbit-per-train load |

The two system benches drive the back end from `lstfe_frontend_model`. This is
a behavioural model of the analog chip: CR-RC pulses with 140 mV/fC gain and a
3 us peaking time. In the model the high threshold is 270 mV (about half a
minimum-ionizing signal) and the low threshold is 80 mV (0.15 of one). Those
thresholds are choices of the benches. Hit clusters put about 15 % of the
central charge on each neighbour.

The reference in these benches works only from the comparator waveforms. It
predicts every record, and the bench checks the records read out against it.
It also counts how often each mechanism occurs, and fails if any of them never
occurs: neighbour enable, suppression, simultaneous trailing edges, overflow,
settling, early train and back-pressure. The end-to-end bench simulates about
230,000 clocks, including three 25 ms power-ups, in a few seconds.

## Files

`rtl/` holds the package `lstfe_pkg` and one module per file:

* `comp_sync`
* `ts_counter`
* `neighbor_enable`
* `hit_capture`
* `hit_arbiter`
* `hit_fifo`
* `train_controller`
* `lstfe_backend`, the top

`tb/` holds one testbench per module, the workload bench and the front-end
model.
