# Drift-time TDC chip and 128-channel TDC board (HERA-B Outer Tracker)

A drift chamber gives a particle's distance from a sense wire as the time between
the particle's passage and the arrival of the wire's signal. The HERA-B Outer
Tracker read about 110,000 such wires at the HERA collider. Bunches crossed there
every 96 ns, and the first-level trigger took about 12 µs to decide.

This repository holds synthesizable SystemVerilog for the digital part of that
readout:

- a TDC (time-to-digital converter) ASIC. It stamps every wire signal with its
  arrival time inside the bunch crossing, keeps the last 128 crossings while the
  trigger decides, and buffers accepted events until they are read out;
- the VME board that carries sixteen of these chips. It collects every accepted
  event from all 128 channels into a 144-byte block and streams the block over a
  4-bit link to a DSP farm.

The analog delay chain that does the actual timing cannot be written as logic. It
is provided as a behavioural model. Everything around it is RTL.

## 1. Measuring a time with a chain of gates

Each channel has a chain of logic gates. A hit launches a signal along the chain.
The next rising edge of the bunch-crossing (BX) clock stops it, and the number of
gates passed is the measured time. This is **common-stop** operation:

- START = the wire signal;
- STOP = the BX clock edge that ends the crossing.

A large count therefore means an *early* hit.

One gate delay is the time bin, about 0.48 ns. The bin depends on the silicon, the
temperature and the supply voltage, so the chip never uses raw counts directly:

* The chain counts in 10 bits (`RAW_W`). This is enough to measure the 200 ns
  calibration interval, which is about 416 bins.
* Before storage, a raw count is saturated to 8 bits. Code 255 (`NO_HIT`) means
  "no hit in this crossing".
* Only when an event has been accepted does the chip convert its raw counts into
  calibrated times of 256 counts per 100 ns (0.39 ns per count). A full 96 ns
  crossing becomes about 246 counts. Calibrated times saturate at 254, so 255
  keeps its meaning.

The model `tdc_delay_line` reproduces this with real-valued simulation time:

- `raw = floor((t_stop - t_start) / bin_ns)`;
- only the first hit after a BX edge counts;
- a hit within `DEAD_NS` (4 ns) after an edge is lost. This represents the 3–5 ns
  dead time measured between crossings.

`bin_ns` is a variable that starts at `BIN_NS`. A testbench can change it during a
run to imitate a temperature drift.

## 2. Calibration and drift correction

The calibration unit runs on a separate 10 MHz gauge clock. After reset it
calibrates each of the nine delay lines in turn: the eight time channels plus a
ninth that is used only for calibration. For each line it applies a START–STOP
pair 100 ns apart, then 200 ns apart, and reads the two raw counts `r100` and
`r200`. A straight line through the two points gives:

```
slope  = r200 - r100                 raw counts per 100 ns
offset = r100 - slope                raw count for a zero interval
gain   = floor(256 * 2^10 / slope)   maps 100 ns onto 256 output counts
```

The gain has 10 fraction bits (`CAL_F`) and is computed by a 14-step sequential
divider (`seq_divider`).

With 0.48 ns bins the results are:

- r100 = 208 and r200 = 416;
- slope = 208, offset = 0 and gain = 1260, i.e. 1.23 output counts per raw count.

The slope of the ninth channel is kept as the reference.

Every `RECAL_CYCLES` gauge periods the ninth channel is measured again. The default
of 8,000,000 periods is 0.8 s. The unit then writes a single correction factor:

```
corr = floor(2^10 * slope_ref / slope_now)   (1024 = 1.0)
```

All eight time channels share this factor. The assumption is that temperature and
supply changes move every chain on the chip alike. The time channels keep taking
data during the re-measurement.

Example: if the bins drift from 0.48 ns to 0.50 ns, slope_now becomes 200 and corr
becomes 1064.

The high-speed multiplier applies the calibration while an accepted event moves
from the pipeline to the derandomizer. For each channel it computes:

```
t = min(254, ((max(raw - offset, 0) * gain) >> 10) * corr >> 10)
```

Two rules apply:

- 255 (no hit) passes through unchanged;
- in hit-register mode (section 4) all words pass through unchanged, because they
  are bit patterns, not times.

The multiplier has two register stages and eight lanes, one per channel. The
constants sit in `cal_ram`, a register file written from the gauge-clock domain.
The multiplier reads it without synchronisation. This is safe because a constant
changes at most once per re-calibration, while data flows every crossing. An
update landing in the same clock as a read can corrupt at most that one event.

## 3. The life of a hit: pipeline, trigger, derandomizer

All fast-control inputs are sampled on the rising BX clock edge:

- `bx_number` (7 bits);
- `flt_accept`;
- `flt_number` (7 bits).

The crossing that ends at BX edge *n* is handled as follows:

| when | what |
|---|---|
| edge *n* | the delay line stops; `hit` and `raw` are valid |
| edge *n*+1 | the hit pattern appears on `hit_out` for the first-level trigger (optionally ORed in pairs); the 8 raw counts are written into pipeline cell `bx_number` presented at this edge |
| later | the trigger asserts `flt_accept` with `flt_number` = that cell (at most 127 crossings later, or the cell is overwritten) |
| accept + 1 | pipeline read data valid |
| accept + 3 | calibrated event pushed into the derandomizer |

The pipeline (`pipeline`) is a 128-cell ring of 8 × 8 bits. Its write and read
pointers are the BX and trigger numbers supplied from outside. The chip does no
pointer arithmetic of its own. An assertion flags an accept for the cell being
written in the same clock.

The derandomizer (`derandomizer_fifo`) holds 16 events per channel in eight FIFOs.
Each FIFO is 8 bits wide and has Gray-coded pointers. The FIFOs cross from the BX
clock into the readout clock. All eight are written together. If any one is full,
the whole event is dropped, so the channels can never fall out of step. When an
event is dropped:

- `event_lost` pulses;
- `fifo_overflow` stays high for as long as the FIFOs are full. The experiment uses
  this signal to pause triggers.

Reset (`reset_unit`) asserts asynchronously and releases through two flops in
each of the three clock domains: BX, gauge and readout.

## 4. Test pattern and hit-register modes

Two pins, `mode`, select where the channels get their input:

| mode | channels driven by |
|---|---|
| 00 CH | their own hit inputs (normal operation) |
| 01 ALL | the `start` pin, all 8 channels |
| 10 EVEN | `start`, channels 2, 4, 6, 8 |
| 11 ODD | `start`, channels 1, 3, 5, 7 |

Channel numbers count from 1, as on the chip's pins, so EVEN is bit mask 0xAA. A
pulse on `start` at a chosen time before a BX edge then produces a known time on
every selected channel.

With `or_en` high, each even-numbered trigger output carries the OR of itself and
the channel below it, i.e. output 2 = hit 1 | hit 2, and so on. The odd-numbered
outputs are unchanged. The stored times are unaffected.

With `func` high, the chip becomes a 64-channel hit register:

- 64 TTL inputs are sampled at each BX edge;
- byte *i* of the event is `ttl_hit[8i+7:8i]`;
- the delay lines are switched off;
- the pipeline, multiplier bypass, derandomizer and readout work exactly as in the
  timing mode.

The test patterns also work in hit-register mode. There they replace the 64 TTL
inputs, repeated in every group of eight, so EVEN gives 0xAA in every byte. The
TTL latch samples levels, so `start` must be held high across a BX edge.

## 5. Readout: chips, board bus and event blocks

Each chip has a strapped 4-bit `chip_id`; on the board, chip *k* has id *k*. A
chip drives the data bus (`data`, with `data_oe`) when:

- `chip_preselect` is high;
- `chip_addr` equals its id.

The chip then puts the oldest word of the channel selected by `chan_addr` on the
bus. A one-clock `rd` strobe removes that word. `chan_empty` reports an empty
channel. The board combines the sixteen chip outputs as an AND-OR gated by the
enables, instead of a tri-state bus.

The Protocol Control Unit (`pcu`) runs on the board's system clock. When every
chip has an event, it sends one 144-byte block and removes each data byte as the
byte is sent:

| bytes | content |
|---|---|
| 0 | 0xB5 |
| 1 | board address (address switches) |
| 2–3 | event number, MSB first |
| 4 | 128 (number of data bytes) |
| 5–7 | 0 |
| 8–135 | data: chip 0 channel 0, chip 0 channel 1, … chip 15 channel 7 |
| 136 | XOR of the 128 data bytes |
| 137–138 | overflow flags of chips 15..8 and 7..0 |
| 139 | event number LSB |
| 140–142 | 0 |
| 143 | 0xE5 |

Only the length, the three-part layout and the sequential addressing are known
from the original system. The byte contents above are this design's own.

The link transmitter (`sharc_link_tx`) has four data lines, a clock line and an
acknowledge line, and only ever sends. It works as follows:

- Six bytes form a 48-bit word, first byte in the top bits.
- A word goes out as 12 nibbles, most significant first, one per system clock.
- `lclk` toggles with each nibble.
- A new word starts only while the receiver holds `lack` high.

A block is therefore 24 words = 288 clocks, and blocks follow without gaps. That
gives:

- 93.75 k events/s at the 27 MHz clock of the Outer Tracker;
- 104 k events/s at the 30 MHz maximum.

The original design aimed at a mean trigger rate of 50 kHz.

## 6. Board status outputs

| LED | meaning |
|---|---|
| `led_reset` | board reset active |
| `led_overflow` | OR of the sixteen chips' `fifo_overflow` |
| `led_accept` | a trigger accept, stretched for `ACCEPT_STRETCH` BX clocks (default 65535, about 6 ms) so it is visible |
| `led_fault` | latched until reset once any chip has dropped an event |

`cal_ready` is high when all chips have finished the start-up calibration.

## 7. Parameters

| parameter | default | where |
|---|---|---|
| `BIN_NS` | 0.48 | delay-line bin (model only) |
| `DEAD_NS` | 4.0 | dead time after each BX edge (model only) |
| `RECAL_CYCLES` | 8,000,000 | gauge periods between re-calibrations (0.8 s) |
| `N_CHIPS` | 16 | chips per board |
| `ACCEPT_STRETCH` | 65535 | accept LED stretch, BX clocks |
| `PIPE_DEPTH`, `FIFO_DEPTH` | 128, 16 | package constants, also parameters of `pipeline` and `derandomizer_fifo` |

The fixed-point widths (`CAL_F` = 10, `GAIN_W` = 14, `CORR_W` = 12, `OFS_W` = 11)
are in `tdc_pkg`. `GAIN_W` = 14 holds the exact gain for slopes down to 17 raw
counts per 100 ns, i.e. bins as coarse as 5.9 ns. Smaller slopes saturate the
gain. `CORR_W` = 12 allows a correction of up to ×4.

## 8. Where this design departs from, or adds to, the original

Sizes, names and the order of processing follow the published description of the
chip and board. The following points are this design's own choices:

* **The 8-bit versus 10-bit conflict.** The chip is described both as an 8-bit TDC
  and as calibrating with 10-bit resolution. Here the delay line counts in 10 bits
  for calibration and the data path stores 8 bits.
* **Raw versus calibrated storage.** Raw counts are stored and calibrated on the
  way out, as described. A raw count of 255 bins or more (about 122 ns, longer
  than a crossing) saturates to 254 and cannot be told from a late hit.
* **The no-hit code 255, and keeping the first of several hits.** Neither is
  given.
* **The correction formula** `slope_ref / slope_now`, the 10-fraction-bit format
  and the one-line-at-a-time calibration order.
* **The OR pairs** (1,2), (3,4), (5,6), (7,8), placed on the even outputs.
* **The encoding of `mode`.**
* **The readout handshake.** The `rd` strobe, `chan_empty`, a separate readout
  clock, a one-bit preselect and the strapped `chip_id` are all added.
* **Dropping a whole event** when any channel is full.
* **The block byte contents and the nibble order on the link.**
* **The LED stretching and the fault definition.**
* **The board's address multiplexer.** It is only named in the description and is
  not built. The board address enters the PCU directly.
* **Not modelled:** the GTL differential receivers, the amplifier-discriminator
  chips in front of the board, the clock oscillators and the DSP receiver. Their
  signals are ports.

## 9. Verification

Every module has a self-checking testbench in `tb/` that compares against values
worked out independently in the testbench. Each testbench ends by printing
`TB_RESULT checks=N failures=M`.

The block-level testbenches cover:

- the mode masks;
- the delay-line arithmetic, including dead time;
- OR pairing;
- TTL grouping;
- pipeline wrap-around;
- the multiplier formula against random constants;
- FIFO fill, drain and loss across clock domains;
- address decoding;
- the calibration constants for several bin sizes, and the correction after a
  drift;
- the PCU block format with random back-pressure;
- the link framing, including the 288 clocks per block.

`tb_tdc_chip` runs one chip through:

- random crossings with the trigger outputs checked;
- random trigger latencies;
- OR mode;
- EVEN test mode;
- hit-register mode, with and without an ODD test pattern;
- overflow with event loss;
- the 3-BX accept latency;
- a drift from 0.48 ns to 0.50 ns bins that the re-calibration must correct.

`tb_tdc_board` is the end-to-end test. It uses a 300-period re-calibration and a
short LED stretch so that the test runs quickly. A receiver model rebuilds every
144-byte block from the link nibbles and compares it byte by byte. The test counts
each mechanism and fails if one never occurs:

- calibration;
- re-calibration;
- drift correction;
- trigger outputs;
- OR;
- ALL, EVEN and ODD test modes;
- hit-register mode, with and without a test pattern;
- pipeline wrap-around;
- link back-pressure;
- FIFO overflow, event loss and the fault LED.

It also checks that 16 queued blocks leave back to back in 16 × 288 clocks plus a
small start-up latency.

`tb_tdc_board_rate` runs the board at its defaults under sustained trigger
rates:

- random triggers with a 50 kHz mean at 27 MHz: no event is lost and overflow
  never rises;
- periodic triggers at 100.2 kHz with a 30 MHz system clock: no loss, as a block
  takes 9.6 µs;
- the same rate with a 27 MHz clock: a block takes 10.67 µs, so the
  derandomizers fill up. The first event is lost after about 250 triggers. The
  testbench checks that overflow and loss then occur and that every trigger ends
  as either a block or a lost event.

`tb_tdc_board_full` uses every default:

- 16 chips;
- calibration of all 144 lines;
- one crossing with a distinct time on each of the 128 channels;
- an accept 100 crossings later;
- the 144-byte block, checked in full.

Hit times in the testbenches are never an exact multiple of the bin. This keeps
the model's floating-point division on the same side of a bin edge as the
testbench's integer arithmetic.

## 10. Simulating

Verilator 5 with timing support is enough. From the repository root, for any
testbench `X`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/tdc_pkg.sv tb/X.sv
./obj_dir/VX
```

Every testbench finishes within seconds of wall time. `tb_tdc_board_full` spends
most of it on the start-up calibration at full size.

`tdc_board` is the top module. To build the board without the behavioural model,
replace `tdc_delay_line` with a real delay-chain macro that has the same ports.
The rest of the design is plain synthesizable SystemVerilog.

## 11. Files

| file | content |
|---|---|
| `rtl/tdc_pkg.sv` | shared constants, test-mode enum, time word type |
| `rtl/tdc_delay_line.sv` | behavioural model of one delay-line channel with its input latch |
| `rtl/test_unit.sv` | test-pattern selection (CH/ALL/EVEN/ODD) |
| `rtl/hit_output_register.sv` | trigger hit outputs with optional pairwise OR |
| `rtl/ttl_hit_latch.sv` | 64-input hit latch for hit-register mode |
| `rtl/gtl_ttl_switch.sv` | selects times or TTL hit bytes for the pipeline |
| `rtl/pipeline.sv` | 128-cell ring buffer addressed by BX and trigger numbers |
| `rtl/cal_unit.sv`, `rtl/seq_divider.sv` | calibration sequencer and its divider |
| `rtl/cal_ram.sv` | offsets, gains and correction factor |
| `rtl/hs_multiplier.sv` | raw count to calibrated time |
| `rtl/derandomizer_fifo.sv`, `rtl/async_fifo.sv` | 8 × 16-event dual-clock buffers |
| `rtl/chip_select_unit.sv`, `rtl/channel_select_unit.sv` | readout addressing and the bus driver |
| `rtl/reset_unit.sv` | reset synchronisers |
| `rtl/tdc_chip.sv` | the chip |
| `rtl/pcu.sv` | event block builder |
| `rtl/sharc_link_tx.sv` | 4-bit link transmitter |
| `rtl/tdc_board.sv` | the board (top) |
| `tb/tb_<module>.sv` | one testbench per module; `tb_tdc_board_full.sv` at full size; `tb_tdc_board_rate.sv` trigger-rate workloads |
