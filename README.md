# IIR-matrix noise filter for event-camera data

An event camera (DVS) does not send frames. Each pixel reports brightness
changes on its own, as events `(x, y, polarity, timestamp)`, and a good part of
the stream is uncorrelated noise: isolated events that belong to nothing in the
scene. The classical filter keeps the last timestamp of every pixel and passes
an event only if its neighbourhood fired recently. At 1280 x 720 that takes
about 29 Mb of state, and every event needs several memory reads.

This design keeps **one small first-order IIR filter per square area** of the
sensor instead (16 x 16 pixels by default). The filter state is a running
average of the timestamps of the area's recent events. An event is accepted
when it comes soon enough after that average. At 1280 x 720 the whole state
is 3600 words of 32 bits. It fits in a few block RAMs, needs one read and one
write per event, and the pipeline accepts **one event per clock**.

The RTL is a SystemVerilog implementation of the architecture published by
M. Kowalczyk and T. Kryjak, "Hardware architecture for high throughput event
visual data filtering with matrix of IIR filters algorithm". The block
structure, the parameters, the handshake and the filtering rule come from
that publication. Everything it leaves open is this design's own choice, and
each such choice is listed in [Departures and own choices](#departures-and-own-choices).

## The filtering rule

For an event at pixel `(x, y)` with timestamp `ts` (microseconds):

```
area    = (floor(y / SCALE), floor(x / SCALE))
state   = S[area]                              -- filter state of the area
correct = (ts - state) < FILTER_LENGTH         -- 1 = keep, 0 = noise
S[area] = state * (1 - f) + ts * f             -- f = UPDATE_FACTOR = 2**-UPDATE_SHIFT
```

A burst of events in one area drags its state close to the present, so later
events in the burst pass. A lone noise event in a quiet area finds a state far
in the past and is marked as noise. It moves the state only by the fraction
`f`, so a single noise event does not open the area for the next one.

Worked example (80 x 64 sensor, 16 x 16 areas, `FILTER_LENGTH` = 100,
`f` = 0.25):

| event | area (x,y) | state | ts  | ts - state | correct | new state              |
|-------|------------|-------|-----|------------|---------|------------------------|
| (19, 6)  | (1, 0)  | 200   | 292 | 92         | 1       | 200*0.75 + 292*0.25 = 223 |
| (33, 57) | (2, 3)  | 160   | 296 | 136        | 0       | 160*0.75 + 296*0.25 = 194 |

With `f` a power of two, the update is `state - (state >> k) + (ts >> k)`.
Both shifts truncate. The example above comes out exact.

### Global update

An area that has been quiet for a long time has a very old state. When an
object then moves into it, the first events are all rejected until the state
catches up. After 2 s of silence, with `f` = 0.25 and a 200 us filter, that
is at least 33 events. To soften this, idle areas are pulled towards the
present at regular intervals.

* Every event sets its area's bit in an **update matrix** (one flip-flop per
  area) and records its timestamp.
* At the end of a packet (an event accepted with `tlast` = 1), every area
  whose bit is clear gets `S = S * (1 - f) + last_ts * f`. Here `last_ts` is
  the timestamp of the packet's last event. Then the matrix is cleared.

The packet length chosen upstream therefore sets the update period. For
example, the source can close a packet every 1 ms of event time.

Example: `last_ts` = 316. Idle areas holding 80 and 104 become 139 and 157.
Areas that received an event in the packet keep their values.

## Pipeline

```
        S0                 S1            S2                          S3
EVENT IN ─┬─ xCell/yCell ─ read addr ─► [BRAM latch] ─► [BRAM out] ─► Recode ─┬─► Verify ─► EVENT OUT reg
          │   {yc,xc}                                      ▲                  │
          │       └──── Delay(3) ────────────────────────────────────────────┼─► write addr
          │                                                │                  └─► Select Data ─► New Ts reg ─► write data
          └─ Global Update (marks, last_ts, scan addresses) └──── forwarding from New Ts (S3, S4, S5)
```

| stage | what happens |
|-------|--------------|
| S0 | The event is accepted (`s_tvalid & s_tready`). `xCell`/`yCell` shift the coordinates, and `{yCell, xCell}` is the Time Map read address. Recode compares this address with the three events ahead. Global Update sets the area's mark. |
| S1 | The block-RAM read is in flight (address registered). |
| S2 | The Time Map word leaves the output register. Recode replaces it if a newer state is still in flight. Verify compares. New Ts computes the new state. |
| S3 | The EVENT OUT register holds the word and `m_correct`. The New Ts register holds the new state, and it is written to the Time Map at the write address delayed by three cycles. |

**Latency:** 3 clock cycles from the input handshake to the output word.
**Throughput:** one event per clock while the input is open.

### Why Recode looks back three events

An event reads its state in S0 but sees it only in S2. Its own new state is
written at the end of S3. So a following event in the same area reads a stale
word:

| the earlier event is ... | because ... | Recode takes |
|---|---|---|
| 1 cycle ahead | its new state is still in the New Ts register | the New Ts register |
| 2 cycles ahead | its write has happened, but after our read | New Ts delayed by 1 |
| 3 cycles ahead | its write happens at the same edge as our read (read/write collision, undefined in a block RAM) | New Ts delayed by 2 |

Recode computes the three address-match flags in S0 and carries them with the
event to S2. There it substitutes the state of the *most recent* matching
event. Four or more cycles apart, the Time Map word is already correct. Two
cycles of this look-back come from the registered block-RAM read and one from
the registered write. If you change either register, change Recode too.

### Back-pressure

`m_tready` (EVENT OUT) is the enable of every register in the pipeline: the
delays, Recode, New Ts, the Verify/output register, both block-RAM read
stages and the write port. When it is low, the pipeline freezes as a whole.
The output word then stays on EVENT OUT, and `s_tready` drops. This keeps the
AXI4-Stream rule that a word stays until it is taken, and keeps every
forwarding distance intact.

### Global update sequence

```
tlast handshake ─► DRAIN (3 cycles) ─► SCAN (NX*NY cycles) ─► FLUSH (3 cycles) ─► input open
                   s_tready = 0 throughout
```

* **DRAIN** lets the events in flight write their states.
* **SCAN** issues one area address per cycle, row by row, through the same
  read port. The write enable is the negated mark of the area. The address,
  flag and write enable travel through a 3-stage delay to the write port.
  Select Data feeds New Ts with the raw Time Map word and `last_ts` instead
  of the forwarded state and the event timestamp. No forwarding is needed
  because every area is visited once. The matrix is cleared when the scan
  ends.
* **FLUSH** waits until the last rewritten state is in memory.

All three phases advance only while `m_tready` is high. The cost is
`NX*NY + 6` closed cycles per update:

| sensor | areas | clock (published) | update every 1 ms | every 10 ms |
|---|---|---|---|---|
| 640 x 480  | 1200 | 387 MHz   | (387000 - 1206) / 1 ms = 385.8 MEPS | 386.9 MEPS |
| 1280 x 720 | 3600 | 361.5 MHz | (361500 - 3606) / 1 ms = 357.9 MEPS | 361.1 MEPS |

These match the published throughput figures. The clock frequencies are the
published FPGA results and cannot be reproduced in simulation.

## Interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `s_tvalid`, `s_tready`, `s_tdata`, `s_tuser`, `s_tlast` | | 1, 1, `DATA_WIDTH`, `USER_WIDTH`, 1 | EVENT IN, AXI4-Stream. `tlast` ends a packet and starts a global update. |
| `m_tvalid`, `m_tready`, `m_tdata`, `m_tuser`, `m_tlast` | | same | EVENT OUT, AXI4-Stream. Every input event comes out, in order. |
| `m_correct` | out | 1 | 1 = event kept, 0 = noise |

The filter drops nothing. A downstream unit uses `m_correct` to discard or
count the noise.

Event word (`dvs_filter_pkg::event_t`, low 64 bits of `tdata`; upper bits,
if any, are passed through):

| bits | field |
|---|---|
| `[31:0]`  | timestamp, 1 count = 1 us |
| `[47:32]` | x |
| `[62:48]` | y |
| `[63]`    | polarity (not used by the filter) |

### Parameters (`iir_matrix_filter`)

| parameter | default | meaning |
|---|---|---|
| `DATA_WIDTH` | 64 | width of `tdata` (at least 64) |
| `USER_WIDTH` | 1 | width of `tuser`, passed through |
| `SCALE` | 16 | side of an area in pixels. A power of two gives a shift; any other value uses a constant divider. |
| `SENSOR_WIDTH`, `SENSOR_HEIGHT` | 1280, 720 | sensor size; sets NX, NY, the address width and the scan length |
| `UPDATE_SHIFT` | 2 | update factor `f = 2**-UPDATE_SHIFT` (0.25) |
| `FILTER_LENGTH` | 1000 | acceptance window, in timestamp counts (us) |

The published evaluation used 16 x 16 areas and `f` = 0.25 throughout. The
filter lengths were 200 us (640 x 480 recording), 1000 us and 2000 us
(1280 x 720 recordings). The defaults here are the 1280 x 720 configuration.

**Memory:** the Time Map address is the concatenation `{yCell, xCell}`, so it
has `2**(clog2(NY) + clog2(NX))` words of 32 bits:

* 1280 x 720: 8192 words, 256 Kib. About 7.5 36-Kb block RAMs, as published.
* 640 x 480: 2048 words, 64 Kib, 2 block RAMs.

The update matrix is NX*NY flip-flops.

## Source files

| file | unit | role |
|---|---|---|
| `rtl/dvs_filter_pkg.sv` | | event word type and widths |
| `rtl/iir_matrix_filter.sv` | top | wiring, handshake, AXI4-Stream assertions |
| `rtl/cell_coord.sv` | xCell, yCell | pixel coordinate to area index |
| `rtl/delay_line.sv` | Delay | enabled shift registers |
| `rtl/select_addr.sv` | Select Addr | read/write address and write-enable mux (event vs. update) |
| `rtl/time_map.sv` | Time Map | simple dual-port RAM, registered output, 2-cycle read |
| `rtl/recode.sv` | Recode | forwarding of in-flight states |
| `rtl/select_data.sv` | Select Data | New Ts operands (event vs. update) |
| `rtl/new_ts.sv` | New Ts | IIR update with shifts, registered |
| `rtl/verify.sv` | Verify | classification and EVENT OUT register |
| `rtl/global_update.sv` | Global Update | update matrix, `last_ts`, DRAIN/SCAN/FLUSH sequencer |

## Simulation

Every testbench in `tb/` checks itself. It prints
`TB_RESULT checks=N failures=M` and stops. Each testbench also has a watchdog.
Build and run one with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal rtl/dvs_filter_pkg.sv rtl/*.sv \
          tb/tb_iir_matrix_filter.sv --top-module tb_iir_matrix_filter -o sim
./obj_dir/sim
```

`tb_workload_noise` and `tb_discarded_events` also need their helper
modules `tb/workload_noise_env.sv` and `tb/discard_env.sv` on the command
line.

| testbench | what it shows |
|---|---|
| `tb_cell_coord` … `tb_global_update` | Each unit alone, against values computed in the testbench. This includes the worked-example numbers, the 2-cycle RAM latency and stall hold, forwarding at each distance, and the 3 + N + 3 update timing. |
| `tb_iir_matrix_filter` | End to end. First the worked example (both events and the global update, every area checked). Then a 6000-event random stream on a 128 x 64 sensor against an in-order reference model. Checked: every output word, flag and latency, the closed-input length, the final state memory. Also counted: stalls, forwarding at distances 1/2/3, updates that rewrite and skip areas, both decisions, back-to-back acceptance. |
| `tb_iir_matrix_filter_full` | The same random test at the default parameters: 1280 x 720, 40 000 events, 3600-area updates. |
| `tb_discarded_events` | Events discarded after a quiet spell, with and without the global update (table below). |
| `tb_workload_noise` | The three evaluated configurations side by side (640 x 480 with a 200 us filter; 1280 x 720 with 1000 us and with 2000 us). Each has a synthetic scene, a moving 64 x 64 object (2000 events/ms) plus uniform noise at 200, 2000 and 10 000 events/ms, with an update every 1 ms. Reports the surviving share of noise and of object events; checks every flag against the model and one event per clock plus `NX*NY + 6` cycles per update. |

Typical result of the workload test (share of events marked correct):

| configuration | noise 200/ms | 2000/ms | 10 000/ms | object events kept |
|---|---|---|---|---|
| 640 x 480, 200 us   | 1.5 % | 1.9 % | 3.8 %  | 90-96 % |
| 1280 x 720, 1000 us | 1.0 % | 1.3 % | 24 %   | 96-98 % |
| 1280 x 720, 2000 us | 2.3 % | 4.2 % | 89 %   | 98-100 % |

Longer filters let more noise through as the noise density rises. This is
the trend of the published evaluation, which used real recordings.

`tb_discarded_events` (uses `tb/discard_env.sv`) repeats the experiment on
events lost when an area becomes active again after a quiet spell. It uses a
200 us filter and, where enabled, an update every 1 ms:

| quiet time | 2 ms | 4 ms | 6 ms | 8 ms | 12 ms | 30 ms | 2 s, no update |
|---|---|---|---|---|---|---|---|
| events discarded | 8 | 10 | 10 | 11 | 11 | 11 | 32 |

The saturation at 11 is the published value. Without the update, the
published real-valued estimate is 33. Here the two shifts of the update
truncate to whole microseconds, and the count comes out one lower.

The reference model in the testbenches is the rule above, applied event by
event in input order with the global update at every `tlast`. Agreement
shows that the pipeline, with its forwarding and stalls, gives exactly the
result of the sequential algorithm.

Verilator has no X state. The Time Map starts at zero through an `initial`
loop, the way a block RAM is initialised at configuration. All control
registers have a synchronous reset.

## Departures and own choices

* **Comparison direction.** The publication's prose for the Verify unit says
  that when state + filter length is greater than the timestamp, the event is
  noise. Its algorithm and its worked example say the opposite: an event
  passes when `ts - state < FILTER_LENGTH`. The second reading is the one
  that filters noise, and it is also what the "33 events removed after 2 s"
  figure implies. This RTL follows the algorithm.
* **Global update operand.** The published pseudocode updates idle areas from
  a variable that holds the *last event's* state. The hardware description
  and the worked example use each area's own state. This RTL uses each
  area's own state.
* **Rounding.** Both shifts truncate. No rounding is specified.
* **Event word layout, 32-bit state, microsecond timestamps.** Not specified.
  Chosen to match the 8-byte event and the 32-bit timestamps used for memory
  sizing. The timestamps wrap after 71.6 min. Wrap-around is not handled.
* **Pipeline registers.** The publication names a 2-cycle registered block-RAM
  read, three Recode flags, and 3-cycle waits before and after the update
  scan. The exact register placement (S0-S3, registered New Ts, registered
  output) is derived from those numbers.
* **Stall.** The publication connects `tready` to the RAM's output-register
  enable. Here it also enables the read latch and the write port, so a
  stalled read is not lost.
* **Update matrix clearing** happens at the end of each scan. The
  publication does not say when.
* **Scan range.** The scan visits the NX*NY real areas, not the whole address
  space. The published throughput loss (one cycle per area per update) points
  to the same.
* **Reset.** Synchronous and active-low, with no Time Map writes while it is
  asserted. Not specified.
* **Not included:** the event-source RAM and the logic analyser used for
  board tests, and the SoC around the filter. The filter has one clock and
  no register interface. Its parameters are fixed at elaboration.

### Known limitations

* Events whose coordinates lie outside the configured sensor alias into
  other addresses of the RAM. They are not rejected.
* A `tlast` on every event gives an update after every event, with
  `NX*NY + 6` closed cycles each. This is legal but slow.
* The filter-quality numbers above come from a synthetic scene. They
  illustrate the trend; they do not reproduce the published recordings.
