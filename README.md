# Trigger and acquisition logic for a cosmic-ray detector station

A station for a network of outreach cosmic-ray detectors is built from
plastic scintillator planes read out by silicon photomultipliers (SiPMs).
Each Frontend board amplifies and discriminates two SiPM channels. Up to
four Frontends feed one Backend board over HDMI cables, so at most eight
detector planes reach the Backend. Cosmic rays are detected by requiring a
coincidence between planes, and the useful coincidence depends on how the
planes are arranged: a vertical stack, two stacks side by side that double
the area, or a tilted telescope. The Backend's programmable-logic device
therefore takes a trigger condition that can be reprogrammed, not a fixed
one. It times each trigger against the GPS pulse-per-second with an
external time-to-digital converter (TDC), so that different stations can
later be lined up in time. It also cuts data taking into *Cosmic blocks*:
slices of the run that can be kept or rejected as a whole, depending on
the environmental readings taken at the start of each one.

This repository holds SystemVerilog for that digital part of the Backend.
It contains the trigger look-up tables, the routing of signals to the two
TDCs, the calibration pulser, the GPS time base, the Cosmic block slicer,
the event builder with its buffer, and a register bank for the CPU. The
analog Frontend, the TDC chips, the GPS receiver, the CPU firmware and the
network link are outside this RTL. Their signals are ports of the top
module, `station_backend_top`.

## Signal path

```
 disc_in[7:0] ──► channel_router ──chan──► trigger_lut ──trigger──► tdc_router ──► tdc_start[1:0]
 (Frontend f:       ▲ force            │         │ trig_bits         ▲   ▲          tdc_stop[1:0]
  bits 2f, 2f+1)    │                  │         ▼                   │   gps_pps
              calib_pulser ──► led[7:0]   chan_sync ──► event_builder ──► event FIFO ──► CPU bus
                                                            ▲     ▲
                                         gps_timebase ──────┘     └── cosmic_block_ctrl ──► block_start
```

There are two kinds of path, and keeping them apart is the main idea of
the design.

* **The timing path has no clock.** From `disc_in` to the `trigger` pin and
  to the TDC `START`/`STOP` pins, the logic is a 2:1 multiplexer (test
  forcing), a table lookup and another multiplexer. A trigger edge reaches
  the TDC with the detector's own timing, plus a fixed delay of the logic.
  Registering it would round every event to the clock period, which would
  undo the TDC's picosecond resolution.
* **The bookkeeping path is clocked.** The channels, the trigger and the
  trigger bits are synchronised with two flip-flops. A rising edge of the
  synchronised trigger becomes one event record in a FIFO. The record
  carries the Cosmic block number, the event number inside the block, and
  a coarse timestamp: GPS seconds, plus clock cycles since the last GPS
  pulse. The CPU pairs each record with the fine time it reads from the
  TDC.

One consequence: a trigger pulse shorter than two clock cycles always
reaches the TDC, but the event builder may miss it. Discriminator pulses
must be at least that long, or be stretched before they reach the logic.

## The trigger: five truth tables

`trigger_lut` holds `N_OPS = 5` truth tables. Each table has `2^N_CH = 256`
entries, one per pattern of the eight channel levels. The current channel
pattern `c` (bit `i` = channel `i`) indexes every table at once:

```
trig_bits[k] = op_enable[k] & table[k][c]        k = 0 .. 4
trigger      = trig_bits[0] | ... | trig_bits[4]
```

Each table can hold any Boolean function of any channels, so the trigger
is not limited to AND/OR templates. The five results are kept apart as
*trigger bits*, and each event record stores which conditions fired.

A table is built by evaluating the wanted condition for all 256 patterns:
bit `c` of table `k` is `f_k(c)`. Examples, with planes 0 to 3 on channels
0 to 3:

| condition | `table[c]` |
|---|---|
| four stacked planes in coincidence | `c[3:0] == 4'b1111` |
| doubled area, planes A1/B1 and A2/B2 | `(c[0] & c[1]) \| (c[2] & c[3])` |
| two-plane telescope on channels 4, 5 | `c[4] & c[5]` |
| any two of four planes | `$countones(c[3:0]) >= 2` |

Tables are written 32 bits at a time. Word `w` of table `k` sits at bus
address `8'h40 + 8*k + w` and holds entries `32*w .. 32*w+31`, with bit 0
as the lowest entry. Reset clears all tables, so nothing triggers before a
configuration is loaded. A table can be rewritten during a run, but while
its eight words are partly written it holds a mix of the old and the new
function. Clear its `op_enable` bit first.

## The two TDCs

`tdc_router` sets the mode of each TDC separately (`A_TDC_CFG`):

* **timing**: `START = trigger`, `STOP = gps_pps`. The TDC measures the
  trigger time against the GPS timing pulse.
* **time over threshold (ToT)**: `START = chan[sel]`, `STOP = ~chan[sel]`.
  `START` rises at the leading edge of the discriminated pulse and `STOP`
  rises at its trailing edge, so a TDC that starts and stops on rising
  edges measures the pulse width. The width is a measure of the pulse
  amplitude.

A disabled TDC has both pins held low. The TDC chips run their measurements
and are read over their own serial interface, which is not part of this
RTL. Note that `STOP` in ToT mode is high whenever the channel is quiet.
The TDC must be armed by its controller before the pulse of interest.

## Event records and Cosmic blocks

`event_t` (in `station_pkg`) is 109 bits. The CPU reads it as four words
at `A_EVT0..A_EVT3` and drops it by writing `A_EVT_POP`:

| bits | field |
|---|---|
| 108:93 | `block_id`: Cosmic block number, 0 at run start |
| 92:77 | `event_no`: events before this one in the block |
| 76:45 | `seconds`: GPS pulses since the last buffer clear |
| 44:13 | `ticks`: clock cycles since the last GPS pulse (saturating) |
| 12:8 | `trig_bits`: which trigger operations fired |
| 7:0 | `hits`: channel levels at the trigger |

Timing: the trigger rises between clock edges; call the next clock edge
edge 1. Then `event_pulse` is high after edge 2, and the record is written
at edge 3. The GPS pulse is treated the same way: `pps_tick` is high after
edge 2, and the counters step at edge 3. The buffer is 64 records deep (`FIFO_DEPTH`). When it is full, new events
are lost and `A_DROPPED` counts them.

`cosmic_block_ctrl` opens block 0 when `run` rises. It closes the current
block and opens the next one when one of these limits is reached:

* `A_BLK_EVENTS` events, when `A_CTRL[1] = 0`;
* `A_BLK_SECS` GPS seconds, when `A_CTRL[1] = 1`.

A limit of 0 never closes a block. The event or GPS tick that reaches the
limit still belongs to the old block. In the next cycle, `block_end` and
`block_start` pulse together and the counters restart. `block_start` is
the CPU's cue to read the temperature, pressure, humidity, orientation,
voltages and currents for the new block. Lowering `run` closes the block
with a lone `block_end`.

## Calibration and test patterns

`calib_pulser` sends a train of `n_pulses` pulses, `width` cycles high and
`period` cycles apart, to one of two places:

* the LED lines of the selected Frontends (`led_mask`, two LEDs per
  Frontend), which tests the whole chain from scintillator light onwards;
* `channel_router`, as a forced channel pattern, which tests the trigger
  and acquisition logic alone.

While a forced train runs, the detector inputs are cut off: the channels
show the pattern during each pulse and zeros between pulses. The edge that
samples the start raises the first pulse. `done` pulses after
`n_pulses * period` cycles. Forced pulses go through the trigger tables
and on to a timing-mode TDC like real hits, so a train of them also
measures the fixed delays of the timing path. A width of 0 counts as 1, a width of `period`
or more is cut to `period - 1`, and a period below 2 counts as 2.

## Register map (32-bit words, single-cycle bus)

A write takes effect at the clock edge where `bus_we` is high.
`bus_rdata` follows `bus_addr` combinationally. Unmapped addresses read 0.

| addr | name | contents |
|---|---|---|
| 00 | CTRL | [0] run, [1] block by time, [2] clear buffer, loss counter and GPS counters (write, self-clearing) |
| 01 | OP_ENABLE | [4:0] enable per trigger operation |
| 02 | BLK_EVENTS | events per Cosmic block (0 = no limit) |
| 03 | BLK_SECS | GPS seconds per Cosmic block (0 = no limit) |
| 04 | TDC_CFG | TDC t at bits 8t+: [0] enable, [1] ToT mode, [4:2] ToT channel |
| 05 | CAL_TIMING | [15:0] pulses, [31:16] period |
| 06 | CAL_CFG | [7:0] width, [8] 1 = force pattern / 0 = LEDs, [23:16] LED mask |
| 07 | CAL_PATTERN | [7:0] forced channel pattern |
| 08 | CAL_START | write: start the pulse train |
| 10 | STATUS | [0] buffer empty, [1] calibration busy, [2] run, [15:8] buffer level |
| 11 | DROPPED | events lost on a full buffer |
| 12 | BLOCK_ID | current Cosmic block |
| 13 | BLK_EVCNT | events in the current block |
| 14 | SECONDS | GPS seconds |
| 15 | BLK_SECCNT | seconds in the current block |
| 20-23 | EVT0-3 | head event record, low word first |
| 24 | EVT_POP | write: drop the head record |
| 40-67 | LUT | truth tables, `8'h40 + 8*op + word` |

## Sizes and what they are sized for

| parameter | value | origin |
|---|---|---|
| channels `N_CH` | 8 | up to four Frontends with two channels each |
| trigger operations `N_OPS` | 5 | the station's trigger allows up to five |
| TDCs `N_TDC` | 2 | two external TDC chips |
| LED lines `N_LED` | 8 | two LEDs per Frontend |
| `FIFO_DEPTH` | 64 | this design's choice |

The station data published so far came from four stacked planes on two
Frontends, with an AND of all four, at about 90 events per minute. That
needs four channels and one truth table. At that rate the 64-record
buffer holds about 40 s of events. The doubled-area and telescope
arrangements need at most eight channels and one or two operations. The
largest station, eight planes and five operations, uses the full design.
After synthesis the whole top is about 1,800 flip-flops, 1,280 of them in
the truth tables, plus a 64 × 109-bit buffer.

## What comes from the station description and what does not

The following follow the description of the station:

* eight channels from up to four Frontends;
* a reconfigurable look-up-table trigger with up to five combinatory
  operations and trigger bits;
* two TDCs, which time the trigger against the GPS signal or measure
  time over threshold;
* test patterns made by pulsing the LEDs or by forcing signals digitally;
* data taking cut into Cosmic blocks by time or by event count, with a
  readout of operating conditions at the start of each block.

The following are this design's own choices, and should be checked
against any real deployment:

* the five operations are full truth tables over all channels, and their
  results are ORed into one trigger;
* forcing replaces all channels at once;
* ToT uses the inverted channel as `STOP`;
* time slicing counts GPS seconds;
* the timestamp is GPS seconds plus ticks;
* the event record layout, the buffer and its depth, and the register map
  and bus.

The original system realises this logic in a commercial programmable SoC
and its firmware. This RTL is a reconstruction of the described
behaviour, not a copy of that implementation.

Not built, because it is analog, bought in, or only named: the SiPMs,
LEDs, amplifiers, discriminators, DACs and bias supply; the Frontend
microcontroller, EEPROM and sensors; the HDMI line drivers; the TDC chips
and their serial readout; the GPS receiver; the clock sources; the CPU and
its firmware; the power monitor and slow-control functions; local storage,
the display and the WiFi module.

## Files and simulation

`rtl/station_pkg.sv` holds the sizes, enumerations, the record type and
the register addresses. Every other `rtl/*.sv` file holds one module,
named after its file. `tb/<module>_tb.sv` is a self-checking testbench for
each module. Each testbench ends by printing
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it
hangs. `tb/station_backend_top_tb.sv` runs the whole top at its default
sizes. It loads the example tables over the bus, then exercises:

* AND and telescope triggers, with records checked against a model;
* ToT routing;
* Cosmic blocks by events and by time;
* LED and forced calibration trains;
* buffer overflow.

It counts each of these mechanisms.

`tb/station_workloads_tb.sv` runs four station arrangements at the default
sizes, with time scaled so that one GPS second is 200 clock cycles:

* the minimum station, two planes in coincidence;
* the published four-plane AND run, in one-minute Cosmic blocks at an
  average of 1.5 muons per second;
* the doubled area, with one trigger operation per stack;
* the telescope.

Each second it sends muon crossings, single noise hits and coincidences
missing one plane, and checks every record. For the four-plane run it
also checks that each one-minute block counts exactly the coincidences
sent into it. That gives about 90 counts per minute, the rate the real
station recorded.

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/station_pkg.sv rtl/*.sv \
          tb/station_backend_top_tb.sv --top-module station_backend_top_tb
./obj_dir/Vstation_backend_top_tb
```

Replace the testbench and top-module names to run a single block's test.
The testbenches use `$urandom` only, and every register is reset, so they
also run on two-state simulators.

Lint notes. `lut_wdata` in `backend_regs` is the bus write data passed on
unchanged. The `SYNCASYNCNET` note on `rst_n` comes from the assertion in
`event_fifo` being disabled during reset.
