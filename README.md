# Multi-channel TDC with photon-number counter for SNSPD arrays

A single superconducting nanowire detector (SNSPD) says whether light arrived. It
does not say how many photons arrived. Split a weak laser pulse over several detectors
and time every detector against the laser trigger. Then the number of detectors that
fire in the same pulse is a photon-number measurement, and their arrival times give
the photon timing. This logic does both for eight input channels in one clock domain:

* a **time-to-digital converter (TDC)** gives every rising edge on every channel a
  timestamp. One LSB is 9.77 ps and the range is 640 ns.
* a **trigger** makes one channel, chosen at run time, the START of an acquisition. It
  opens an acceptance window whose length is programmable in steps of 2.5 ns.
* the TDC reports the START-to-STOP interval of every hit on another channel inside
  the window.
* an **ACDC** (asynchronous-correlated digital counter) reports, per acquisition,
  which channels fired and how many. Acquisitions where nothing fired are reported too,
  as 0 photons.
* a **FIFO** merges both kinds of result into one stream of 48-bit records for the
  processor and USB link that carry them to a host.

In the reference setup, CH8 takes the laser trigger and CH1..CH7 take seven detectors
behind an eight-port fibre splitter. Any channel can be the trigger. In that case CH8
is a normal stop channel.

```
hit_in[7:0] ──► tdl_delay_line x8 ──► tdc_multichannel ──hit_ts──► trigger_window
 (comparator     (fine interpolator,    (coarse counter,             (START, WINDOW,
  outputs)        behavioural model)     timestamps, intervals) ◄─gate/start_ts── STOP)
                                              │ TIME records         │ gate, close
                                              ▼                      ▼
                                          event_fifo ◄──COUNT records── acdc
                                              │
                                   rd_en / rd_data  (to processor / USB)
```

## Time base and timestamps

Everything runs on one 400 MHz clock. One cycle is 2.5 ns, which is the window
resolution of the trigger. A timestamp is 16 bits:

* **coarse (8 bits)**: a free-running cycle counter in `tdc_multichannel`. It wraps
  every 256 cycles = 640 ns. That is the TDC's full-scale range.
* **fine (8 bits)**: comes from a tapped delay line with 256 taps across one clock
  period, 2500/256 = 9.77 ps per tap.

The delay line (`tdl_delay_line`) is the one part that is not logic. In an FPGA it is
a carry chain. A flip-flop behind each cell samples the chain on every clock edge. A
rising edge that entered the chain *d* picoseconds before the clock edge has passed
floor(*d*/9.77 ps) cells, so the captured word is a thermometer code with that many
ones. `tdl_delay_line` is a behavioural model of this sampling with ideal, equal tap
delays. It uses `$realtime` and is not synthesizable. A real design would put a
placed carry chain in its place, plus a code-density calibration of the uneven taps.
That calibration is not included.

`tdc_channel` turns the word into a timestamp:

* A new hit is recognised when tap 0 reads 1 and read 0 in the previous cycle. Only
  rising edges count.
* The fine value is the number of ones in the word. Counting ones tolerates bubbles.
* The timestamp is `ts = coarse*256 - ones (mod 2^16)`.

An edge that arrives less than one tap before a clock edge is caught one cycle later
with all 256 taps set, which gives the same `ts`. The computed timestamp is never
earlier than the true edge and at most one LSB later. The difference of two timestamps
is therefore within ±1 LSB of the true interval. The testbenches check exactly this
bound.

## Acquisition: START, WINDOW, STOP

`trigger_window` works on the registered hits and timestamps of all channels:

* **START.** The trigger channel (`trig_sel`, 7 = CH8) fires while `enable` is high and
  no window is open. The hit's timestamp becomes `start_ts` and the 8-bit acquisition
  number increments.
* **WINDOW.** The window is open for `win_cycles_m1 + 1` cycles, counting the START
  cycle, so from 2.5 ns to 640 ns. Every hit on another channel in those cycles is
  *gated*. It goes to the TDC, which registers `hit_ts - start_ts`, and to the ACDC.
  In the START cycle itself, a hit is gated only if its timestamp is not earlier than
  START's. So a pulse that came just before the trigger is not counted.
* **STOP.** In the cycle after the last window cycle `close` pulses with the
  acquisition number, and the ACDC emits its result. A new START can be taken in that
  same cycle.

More trigger-channel hits while the window is open are ignored. There is no
re-trigger. If the window is at least one laser period long, which is useful to
capture all the light of a pulse, at most every other laser pulse starts an
acquisition at high repetition rates. Dropping `enable` lets a running window finish.
Change `trig_sel` and `win_cycles_m1` only while no window is open.

Hits are resolved to the cycle in which they are detected. A hit is inside the window
when it is detected in cycles S … S+W−1, where S is the START cycle and W the window
length. With the trigger in the middle of a clock period, a pulse (W−1)·2.5 ns later
is inside and one W·2.5 ns later is outside. The end-to-end test checks both.

## ACDC: photon number per acquisition

`acdc` keeps one presence bit per channel. The first gated hit of a channel in an
acquisition sets it, and more hits on the same channel do not add to it. At `close`
the ACDC outputs the pattern and its population count, then clears the bits. If a new
window starts in the closing cycle, that cycle's gated hits begin the new pattern. A
detector cannot resolve more than one photon, so the count is the number of detectors
that fired. With seven detectors it ranges from 0 to 7. A host builds the photon-number
histogram from these counts. Correcting that histogram for detection efficiency and
splitter losses to reconstruct the light's statistics is host software and is not
part of this logic.

The name says "asynchronous", but here the presence of an event is taken from the
TDC's edge detection, gated by the trigger. It is not sampled by a separate circuit.
The observable result is the same for pulses longer than one tap.

## Records and read-out

Every result is a `pc_pkg::record_t` of 48 bits:

| field   | bits | TIME record (`TAG_TIME` = 1)          | COUNT record (`TAG_COUNT` = 2)           |
|---------|------|---------------------------------------|------------------------------------------|
| tag     | 47:46| 1                                     | 2                                        |
| acq_id  | 45:38| acquisition number                    | acquisition number                       |
| chan    | 37:32| channel index, 0 = CH1                | number of channels that fired            |
| payload | 31:0 | interval in 9.77 ps LSBs (bits 15:0)  | bit *i* set if channel *i* fired         |

`event_fifo` has one holding register per source: eight interval sources, then the
ACDC as source 8. Each cycle a fixed-priority arbiter moves one held record into a
512-entry FIFO, lowest source first. Because the ACDC is last, an acquisition's COUNT
record normally follows its TIME records. The acquisition number is in every record,
so a reader should still group records by number and not rely on their order.

When the FIFO is full the holding registers wait. A new record for a holding register
that is still occupied is lost and counted in `drop_count`. The read side is
first-word-fall-through on the same clock: `rd_data` is valid while `rd_empty` is low,
and `rd_en` pops it.

## Top-level interface (`photon_counter_top`)

| port            | dir | width | meaning                                              |
|-----------------|-----|-------|------------------------------------------------------|
| `clk`, `rst_n`  | in  | 1     | 400 MHz clock, asynchronous active-low reset         |
| `hit_in`        | in  | 8     | comparator outputs CH1..CH8 (bit 0 = CH1)            |
| `enable`        | in  | 1     | accept new STARTs                                    |
| `trig_sel`      | in  | 3     | trigger channel index                                |
| `win_cycles_m1` | in  | 8     | window length in 2.5 ns cycles, minus one            |
| `rd_en`         | in  | 1     | pop the head record                                  |
| `rd_data`       | out | 48    | head record                                          |
| `rd_empty`, `fifo_full`, `fifo_level` | out | | FIFO state                         |
| `drop_count`    | out | 32    | records lost to overflow                             |
| `acq_start`, `window_open` | out | 1 | START taken this cycle; window open          |

Parameters: `N_CH` = 8, `TAPS` = 256, `CLK_PERIOD_PS` = 2500.0 and `FIFO_DEPTH` = 512.
The record's 6-bit channel field and 32-bit pattern leave room for `N_CH` up to 32.
`tb_photon_counter_32ch` runs that size.

Latency:

1. The delay line captures the edge at the first clock edge after the hit.
2. The timestamp is registered one cycle later.
3. The gate decision is combinational in that cycle, and the interval is registered
   one cycle after it.
4. A TIME record enters the FIFO two cycles after that at the earliest.
5. A COUNT record leaves the ACDC one cycle after `close` and likewise enters the
   FIFO two cycles later.

The FIFO accepts one record per cycle, 400 M records/s. At most eight records come
from one acquisition.

## Where this departs from, or adds to, the described system

The system description fixes these:

* 8 channels
* a trigger channel chosen by the user
* a programmable acceptance window with 2.5 ns resolution
* a TDC range of 640 ns and a resolution below 15 ps r.m.s.
* per-acquisition presence detection that counts empty acquisitions as 0 photons
* a FIFO between TDC/ACDC and the USB link

The following are choices made here:

* the 400 MHz clock, taken as the 2.5 ns trigger resolution
* the carry-chain delay line with 256 equal taps and no calibration
* the edge rule and ones-counter decoder
* the timestamp format
* no re-trigger
* the START-cycle ordering rule
* the window-length encoding
* the record layout
* the FIFO depth, holding registers, arbitration and drop counting
* a single clock for the read side
* the trigger's own output into the FIFO: the block diagram draws one. Here it is
  the acquisition number that every record carries. There is no separate START record.

The ARM processor, USB link and host software are not included. Neither are the
analog front end (amplifiers, comparators), the detectors or the optics. The FIFO read
port and the three configuration inputs are where a processor would attach. On a real
Zynq that would also need a clock-domain crossing.

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. All use `$urandom` stimulus and compare against references written
independently of the RTL.

| testbench | what it checks |
|-----------|----------------|
| `tb_tdl_delay_line` | thermometer shape and ones count for 200 random hit phases, the late-edge case, and release after the pulse |
| `tb_tdc_multichannel` | timestamps `c*256 − n` for random words on 8 channels, no double detection, intervals and ids of gated hits |
| `tb_trigger_window` | gate/start/close/ids each cycle against a cycle-index window model; random window lengths (1–7 and 256 cycles), trigger channels, enable |
| `tb_acdc` | pattern, count and id at every close; 0-photon and multi-photon acquisitions; a window starting in the closing cycle |
| `tb_event_fifo` | every popped record, flags, level and drop count against a queue model, with phases of back-pressure |
| `tb_photon_counter_top` | end to end at default size (see below) |
| `tb_photon_timing` | two sets of channel skews (1.81–3.36 ns and 4.21–6.60 ns) at 1.8 MHz, then the second set with a free-running 76 MHz laser, 30 % detection per channel and a 15 ns window; 16 ps r.m.s. jitter per edge. Checks the mean interval to within 3 ps, and the spread to within 15 % of √(2σ² + LSB²/6) ≈ 23 ps. Checks one COUNT record per START, and that trigger pulses falling into an open window are ignored |
| `tb_photon_counter_32ch` | the top at `N_CH` = 32: 300 shots with random hits on 31 channels, every record checked, none missing |
| `tb_photon_statistics` | Poisson pulses of mean 0.5, 1, 2 and 4.2 photons over a 1-of-8 splitter onto 7 detectors of efficiency 0.807, 10 000 pulses each: every COUNT record exact, mean click number against 7(1 − e^(−μη/8)) |

`tb_photon_counter_top` plays laser shots as pulses on `hit_in`. It checks every TIME
interval to within one LSB of the true picosecond delay, and every COUNT record
against the detectors it fired. It also checks that no record is missing. It counts
the following and fails if any of them never happened:

* START
* 0-photon and multi-photon acquisitions
* hits after the window
* a hit 300 ps before START
* a trigger ignored inside a window
* shots while disabled
* the exact window edge
* a change of trigger channel
* FIFO full with dropped records

`tb_photon_statistics` shortens the 10 µs repetition period to 30 cycles. Nothing in
the logic depends on idle time.

To simulate with Verilator 5 from the repository root (testbench warnings about
widths are expected, hence `-Wno-fatal`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/pc_pkg.sv tb/tb_photon_counter_top.sv --top-module tb_photon_counter_top
./obj_dir/Vtb_photon_counter_top
```

Replace the testbench name to run another one. Each finishes in seconds, the
statistics run in about 15 s.

## Limits worth knowing

* Timing accuracy in simulation is ideal. Real tap delays are uneven and drift with
  temperature, so a code-density calibration (a lookup from ones-count to picoseconds)
  belongs between `tdc_channel` and the interval subtraction in a hardware build.
* Each channel resolves one rising edge per clock cycle. Pulses and gaps must be
  longer than one tap. Comparator pulses from SNSPDs are several nanoseconds wide,
  and their dead time is about 15 ns.
* Intervals are modulo 640 ns. Windows are limited to 256 cycles, so they never wrap.
* The acquisition number wraps after 256 acquisitions.
