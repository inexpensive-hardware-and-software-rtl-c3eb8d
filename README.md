# A four-channel photon time tagger with a laser sequencer

Fluorescence correlation spectroscopy and single-molecule FRET need the
arrival time of every detected photon, not photon counts in fixed bins: at
typical rates of a few kHz almost every microsecond bin would be empty. This
RTL describes a small FPGA instrument that does exactly that. Each pulse
from up to four photon-counting detectors becomes a 48-bit record holding
the clock cycle it arrived in, and the records stream to a PC over USB. The
same chip also drives up to four control outputs, for example to switch an
acousto-optic filter between two laser lines. These outputs are fed back
into the tagger, so every change of excitation is time-stamped in the same
stream as the photons. The PC can therefore tell, for every photon, which
laser was on when it arrived. That is the basis of alternating laser
excitation (ALEX).

The design follows the instrument of Gamari et al., *Inexpensive
electronics and software for photon statistics and correlation
spectroscopy*. That instrument runs on a Cyclone II FPGA board with a
Cypress FX2 USB controller, at a 128 MHz clock (7.8 ns per count). The
publication describes what the firmware does, but not how it is built
inside. Everything below that the publication does not state is marked as
a choice made for this RTL.

## Block structure

```
             +---------------------- timetagger_top -----------------------+
  FX2 bus <->| fx2_interface <-> register_interface --cfg--> sequencer ----+--> seq_out (to AOTF)
             |      ^                    |                        |         |
             |      | records            | control                | delta   |
             |      |                    v                        v         |
  det_in --->|      +-------------- tagger: event_detect -> record_encoder  |
             |                              timestamp_counter -> record_fifo|
             +--------------------------------------------------------------+
```

The wiring matches the published block diagram: FX2 interface, register
interface, sequencer and tagger. The sequencer's outputs go both off-chip
and into the tagger's delta inputs, and the detectors go into the strobe
inputs. The PLL that multiplies the board's 32 MHz crystal to 128 MHz is a
vendor macro. It is not part of this RTL, so `clk` is a port of the top.

## The record

Every event, photon or sequencer change, becomes one 48-bit record. The
published format counts bits from 1 (channels in bits 37–40, type in 46,
then 47 and 48). The same fields, counted from 0 as in the RTL
(`timetag_pkg::record_t`), are:

| bits    | field        | meaning |
|---------|--------------|---------|
| 35:0    | timestamp    | clock cycles since the counter was last cleared |
| 39:36   | channels     | strobe record: every detector channel that fired in this cycle. Delta record: the state of all four sequencer outputs just after the change |
| 44:40   | unused       | always 0 |
| 45      | record type  | 0 = strobe (photon), 1 = delta (sequencer change) |
| 46      | wraparound   | the timestamp counter rolled over since the previous record |
| 47      | sample lost  | at least one record was lost to a full buffer since the previous record |

The USB link sends a record as six bytes, least significant byte first. A
host can therefore read a record as a little-endian 48-bit word. This byte
order is a choice made for this RTL.

The 36-bit counter wraps every 2^36 / 128 MHz ≈ 537 s. The host rebuilds
absolute time by adding 2^36 cycles at each record whose wraparound bit is
set. This works as long as at least one event arrives in every 537 s
period.

## From input edges to records (`tagger`)

Four stages, all in the core clock domain:

1. **`event_detect`** passes the four detector inputs and the four delta
   inputs through the same two-flop synchroniser. Both paths then have the
   same delay, so photon and excitation timestamps can be compared
   directly. A photon is a *rising* edge on an enabled strobe channel. A
   delta event is *any* change on an enabled delta channel.
2. **`timestamp_counter`** counts cycles, can be cleared by the host, and
   pulses `wrap` on the cycle it rolls over to zero.
3. **`record_encoder`** makes at most one record per cycle, by these rules:
   - A delta event wins. If a photon arrives in the same cycle as a
     sequencer change, the photon is dropped, as in the published
     instrument. This drop does *not* set the sample-lost bit, because the
     publication ties that bit only to buffer overruns.
   - Photons on several channels in the same cycle give one record with
     several channel bits set.
   - If the buffer is full, the record is lost, and the next record that
     is written carries the sample-lost bit.
   - A counter wrap sets the wraparound bit on the next record that is
     written, even if that record comes many wraps later. The publication
     only says the bit "indicates counter overflows".

   The record is formed combinationally from registered inputs. It is
   written into the buffer at the end of the cycle in which the event
   appears, so the full flag is never stale.
4. **`record_fifo`** is a 2048 × 48-bit synchronous FIFO with a show-ahead
   read port. The published instrument absorbs bursts of "roughly 2000
   events" at the clock rate. The depth was chosen to match: 2048 × 48 bits
   also fits the on-chip RAM of the FPGA it used.

Timing: an input edge that reaches the first synchroniser flop at clock
edge *k* is written into the buffer at edge *k*+3. Its timestamp equals the
number of cycles since the clear, counted at edge *k*, plus 2. That offset
is the same for every channel, so it cancels in any time difference. Each
channel needs one low cycle between pulses. A single channel can therefore
record one event every two cycles, and the four channels together can
record one per cycle.

## The USB side (`fx2_interface`)

The FX2 presents byte FIFOs ("endpoints") to the FPGA. This design uses
three:

| `fifoadr` | endpoint | direction | content |
|-----------|----------|-----------|---------|
| 0 | command | host → FPGA | 6-byte register commands |
| 2 | data    | FPGA → host | records, 6 bytes each |
| 3 | reply   | FPGA → host | 5-byte register replies |

In each cycle the interface does at most one transfer:

- If the addressed endpoint's empty flag is low, it pops a byte with `slrd`.
- If the full flag is low, it pushes a byte with `slwr`.

Command bytes have the highest priority, then reply bytes, then record
bytes. A command is an op byte (bit 0 = write), an address byte, and 32
data bits sent least significant byte first. No new command is read until
the reply (the address, then the register value after the command) has
been sent.

**This bus is a simplified model.** A real FX2 slave FIFO has a
bidirectional data bus and flags for the currently addressed endpoint
only, and it runs on its own interface clock of at most 48 MHz. Here the
bus has one flag per endpoint and runs on the 128 MHz core clock. To
connect real FX2 hardware you would need an asynchronous FIFO between the
record buffer and this block, plus pin-level adaptation. The publication
gives no FX2 bus details, and its FX2 firmware is a separate package that
it does not describe.

Throughput: with no back-pressure the interface sends one record every 7
cycles. The real bottleneck is USB, at about 600,000 records per second
(3.6 MB/s, about one byte every 36 core cycles). The record buffer exists
to cover the gap between that rate and the clock rate.

## The sequencer and alternating excitation

Each of the four channels is a down-counter that toggles its output when
the count runs out. Its program (`seq_cfg_t`) has four fields:

- `init_level`: the level while stopped and at the start.
- `init_count`: the number of cycles at `init_level` before the first
  toggle.
- `low_count` and `high_count`: the lengths of the later low and high
  phases. The period is `low_count + high_count`, and a count of 0 acts
  as 1.

The publication says only that each channel produces a programmable
periodic TTL waveform. This way of programming it is a choice made for
this RTL.

ALEX as published switches lasers every 50 µs, which is 6400 cycles. To
set it up, program two channels with the same counts (6400) and opposite
`init_level`, then start both with the same `seq_run` write. The two
outputs change in the same cycle, so each switch produces a single delta
record holding both new levels. To classify a photon, the host takes the
channel bits of the most recent delta record before it.

Channels that are left unprogrammed (all counts 0) toggle every cycle.
Disable them in `DELTA_EN`, or they will fill the record stream.

## Registers (`register_interface`)

The whole register map is a choice made for this RTL. The publication
names a register interface but does not list its registers.

| address | name | bits |
|---------|------|------|
| 0x00 | CTRL | [0] capture enable, [1] sequencer run, [2] clear timestamp (write-1 pulse; reads 0) |
| 0x01 | STROBE_EN | [3:0] detector channel enables (reset 0xF) |
| 0x02 | DELTA_EN  | [3:0] sequencer-change enables (reset 0xF) |
| 0x10 + 4·ch + 0 | SEQ init_level | [0] |
| 0x10 + 4·ch + 1 | SEQ init_count | [31:0] |
| 0x10 + 4·ch + 2 | SEQ low_count  | [31:0] |
| 0x10 + 4·ch + 3 | SEQ high_count | [31:0] |

All other addresses read 0. The reset values are: capture off, sequencer
stopped, all enables on, all sequencer counts 0.

A typical start sequence:

1. Program the sequencer channels.
2. Set the enables.
3. Write CTRL = 0x7. This clears the counter and starts capture and the
   sequencer in the same cycle.

## Departures from the published instrument and limits

- The FX2 bus is simplified and runs in the core clock domain (see above).
- The PLL is outside the RTL; the top takes the 128 MHz clock directly.
- "The various buffers" of the publication are modelled as one 2048-record
  FIFO. The FX2's own endpoint buffers add more capacity in the real
  instrument.
- The FIFO reads its memory array asynchronously (show-ahead). This
  simulates and synthesises as written. On a Cyclone II, however, block
  RAM needs a registered read, which would add one cycle of read latency
  at the interface.
- The following are choices made for this RTL:
  - the synchroniser depth and the rising-edge definition of a photon;
  - the wraparound-flag rule;
  - the channel enables and the timestamp clear;
  - the whole host protocol.
- The correlation analysis (multi-tau correlation of time-tag lists)
  happens in host software in the published system. No hardware for it is
  given here.
- Detector pin numbers, connectors and the crystal belong to the board,
  not to the RTL.

## Simulation

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. For example, with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module timetagger_top_tb \
    -y rtl -y tb +libext+.sv rtl/timetag_pkg.sv tb/timetagger_top_tb.sv
./obj_dir/Vtimetagger_top_tb
```

`-Wno-fatal` keeps width warnings in the testbenches from stopping the
build. The testbenches count clock cycles, not nanoseconds: the clock
period in them is arbitrary. Substitute the testbench name for the others:

| testbench | what it checks |
|-----------|----------------|
| `event_detect_tb` | Random inputs against a sampled-history model, including the latency. |
| `timestamp_counter_tb` | Counting, wrap pulse and clear, on an 8-bit counter and on the 36-bit default. |
| `record_encoder_tb` | Random events, full cycles and wraps against the record rules. |
| `record_fifo_tb` | Against a queue model, at depth 16, plus a fill and drain at 2048. |
| `tagger_tb` | Every record, including timestamps, against the inputs. Also overflow, the sample-lost bit and the 3-cycle latency. |
| `sequencer_tb` | Four programs, including a complementary 6400-cycle pair, every cycle against a closed-form waveform. |
| `register_interface_tb` | Against a shadow register file. |
| `fx2_interface_tb` | Command decoding, replies, and record byte order under back-pressure. |
| `timetagger_top_tb` | The whole chip at default sizes. Programming over USB, ALEX-style switching with photons aimed at the switch cycles (dropped), a 3000-event burst into the 2048-record buffer with USB held, and a forced counter wrap. Each of these mechanisms must occur. Runs in about a second. |
| `alex_workload_tb` | 10 ms of ALEX at 50 µs switching with two detectors. Every photon's excitation, recovered from the preceding delta record, must match the laser that was on. |
| `fcs_rate_workload_tb` | Poisson photons on two detectors. At 400,000/s, below the link rate, every photon arrives intact. At 3.2 million/s the buffer overflows: received records must equal sent minus refused, the sample-lost bit must appear, and the delivered rate must equal the link rate (about 592,000 records/s) to within 2 %. |

`tb/fx2_model.sv` is a behavioural model of the FX2 endpoints. Its
`DRAIN_EVERY` parameter sets the USB drain rate, and `hold_data` holds
the data endpoint to create back-pressure. Verilator is a two-state
simulator, so every register that is read is reset.

The synthesizable sources need only the package `rtl/timetag_pkg.sv` read
first. The top-level module is `timetagger_top`, and `DEPTH` (default
2048) is its only parameter.
