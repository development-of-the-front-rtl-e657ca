# Read-out logic for a 256-channel AGET front-end card

A TPC with Micromegas readout produces slow charge pulses on many anode strips.
These pulses can last tens of microseconds. The front-end card (FEC) described
here reads 256 strips. It uses four 64-channel AGET chips. Each chip amplifies
and shapes every channel and stores its waveform in a 512-cell switched-capacitor
array (SCA), an analog memory. When a trigger arrives the arrays stop recording.
The stored cells are then shifted out through one analog output per chip, and a
12-bit ADC at 25 MHz digitises each output. The FPGA on the card collects the four
ADC streams. It puts the samples into a form that is easy to compress and to
ship: one channel's whole waveform after the other. It holds up to two events in
RAM and sends them over an optical fibre to a data collection module (DCM). The
DCM also sends commands and triggers back over the same fibre.

This repository gives SystemVerilog for that FPGA logic. It does not model the
analog chips, converters, clock chip or optical transceiver. They appear only as
ports, plus one behavioural model in `tb/` that stands in for the AGETs and ADCs.

## The central problem: the AGET reads out column by column

An AGET does not deliver one channel after another. During its read phase it
outputs one SCA *column* at a time: time cell 0 of channels 0..63, then cell 1
of all channels, and so on up to cell 511. Each column is preceded by a few
read clocks of a "reset" level, which carries no data:

```
sca_read  ____/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\____
output        | reset x4 | ch0 ch1 ... ch63 | reset x4 | ch0 ... ch63 | ... | ch63 |
                          column 0                     column 1           column 511
```

A physics event is naturally analysed per strip, and a quiet strip can be
dropped as a whole. So the FPGA turns this column-major stream into
channel-major order. It does so through addressing alone. Each chip has its own
RAM bank, addressed as `{slot, channel, column}`. The column-major stream writes
to scattered addresses. A plain sequential read then returns channel 0's 512
samples, then channel 1's, and so on. No sample is moved twice.

Sizes at the default parameters:

| quantity | value |
|---|---|
| chips x channels x cells | 4 x 64 x 512 = 131,072 samples per event |
| stored word | 16 bit: `{4'h0, sample[11:0]}` |
| RAM | 2 events x 131,072 x 16 bit = 4,194,304 bit (4.2 Mbit) |
| read phase | 512 x (4 + 64) = 34,816 clocks = 1.39 ms at 25 MHz |
| uncompressed event on the link | 2 + 256 x 513 = 131,330 words = 2.10 Mbit |

At 10 events/s an uncompressed event stream is 21 Mbit/s. The upper nibble of a
stored word is always zero, so a synthesiser may keep only 12 bits per word, or
3.1 Mbit. The 16-bit word is kept because it is the link word: the same nibble
tells data from header words on the link.

## Data path

```
 cmd_data ──► cmd_decoder ──trig──┐         cal_pulser ──► cal_step
                 │  └──cal_fire──────────────►│  └─trig─┐
                 │                            ▼         ▼
                 │                        acq_ctrl (two slots, busy)
                 │                    sca_write │ seq_start     ▲ slot_release
                 │                              ▼               │
                 │   sca_read ◄──── sca_read_seq (slot tags)    │
  adc_data[4] ───┼──────────────► adc_capture (latency align)   │
                 │                   │ wr (4 samples/clock)     │
                 │           ┌───────┴────────┐                 │
                 │     event_buffer    chan_peak_tracker        │
                 │           └───────┬────────┘                 │
                 └─compress, thresh─► event_packer ─────────────┘
                                        │
                                 tx_data / tx_valid / tx_ready ──► link
```

Everything runs on one 25 MHz clock. It is also the SCA read clock and the ADC
sampling clock. Reset is asynchronous and active low (`rst_n`).

### `sca_read_seq`: the read phase
A `start` pulse raises `sca_read`. It stays high for 512 columns of
`RESET_TCK + 64` clocks. Every clock that carries a channel sample raises
`slot_valid`, with its column and channel number. The last channel of the last
column raises `slot_last`. The chip allows 2 to 4 reset clocks per column, and
`RESET_TCK` defaults to 4.

### `adc_capture`: lining samples up with their slots
A pipelined ADC returns the sample of clock *t* only at clock *t* + `ADC_LAT`.
The capture stage delays the slot tag by `ADC_LAT` clocks, then registers the
tag with the four ADC words, so a tag and its sample end up in the same
register. Reset-level samples have no tag and are dropped. The four chips
are clocked in lock-step, so one tag serves all four lanes. `ADC_LAT = 7` is the
latency of the AD9235-class converter the card uses. Change it if the converter
differs. A wrong value writes every sample into its neighbour's cell.

### `event_buffer`: the two-event RAM
The buffer has four banks, one per chip, and they share one write address. The
read port has one clock of latency, and `rd_chip` selects the bank.

### `chan_peak_tracker`: what compression looks at
This block sees the same write stream as the RAM. It keeps the largest sample of
every (slot, chip, channel). A write to column 0 restarts the maximum, so a reused
slot needs no clearing. The packer reads it combinationally.

### `event_packer`: framing for the DCM
The packer drains full slots in the order they were filled. It sends:

| word | meaning |
|---|---|
| `{4'hA, event_number[11:0]}` | event header |
| `{4'hC, 4'h0, chip[1:0], channel[5:0]}` | channel header, then 512 data words |
| `{4'h0, sample[11:0]}` | one SCA cell, in time order |
| `{4'hF, channels_sent[11:0]}` | end of event |

With compression on, a channel is sent only if its peak is at least `thresh`
ADC codes. Otherwise it is skipped in one clock and `chan_skip` pulses. The slot is
released when the end word is issued. The output is a valid/ready stream. A
4-word FIFO covers the RAM latency, so one word leaves per clock while
`tx_ready` stays high. An assertion checks that a waiting word does not change.

### `acq_ctrl`: triggers and the two slots
The SCAs record while the controller is idle (`sca_write` high). A trigger is
accepted only when the controller is idle and the next slot is free. Acceptance
drops `sca_write`, which freezes the 512 cells. The controller then starts the
read phase and waits for the capture stage to report the last sample. It then
marks the slot full, moves to the other slot and resumes recording. Otherwise the
trigger is rejected: during a read phase, or when both slots hold unsent events.
Rejections are counted. `busy` tells the trigger source that a trigger would now
be lost. While one event drains over the link, the next can be acquired into the
other slot.

### `cmd_decoder` and `cal_pulser`: the control side
Commands arrive as 16-bit words `{opcode, argument}`:

| opcode | action |
|---|---|
| `1` TRIG | trigger one acquisition |
| `2` MODE | `arg[0]` = compression on |
| `3` THRESH | compression threshold, ADC codes |
| `4` CAL | fire the calibration pulser; `arg` = clocks from the step to its trigger |

Any other opcode except `0` (no-op) is counted in `n_bad_cmd`. The pulser drives
the card's analog calibration circuit (`cal_step`). That circuit injects a known
charge into the AGET inputs. `cal_step` is held for `CAL_HOLD` clocks. The
pulser raises its own trigger `delay + 1` clocks after the step, so the response
falls inside the frozen SCA window.

## Timing summary (defaults)

| from | to | clocks |
|---|---|---|
| command word | `trig` inside the card | 1 |
| accepted trigger | `sca_read` high | 2 |
| `sca_read` high | low | 34,816 |
| last slot | slot marked full | `ADC_LAT` + 3 |
| slot full | first link word | 3 |
| first link word | last link word (no stalls, uncompressed) | 131,330 |

The read phase overlaps the draining of the other slot. So if the link takes a
word every clock, events can be taken every 5.25 ms, about 190 per second. The
10 events/s that the card is sized for needs 21 Mbit/s on the link. From
trigger to the last word of an uncompressed event takes 166,163 clocks
(6.6 ms) in simulation, well inside the 100 ms between events at 10 Hz.

## What follows the card's description and what is this design's own

Taken from the card's description:
- four AGET chips of 64 channels with 512 SCA cells;
- 12-bit ADCs clocked at 25 MHz, with the read-out also at 25 MHz;
- column-by-column AGET order with 2 to 4 reset clocks per column;
- the FPGA rearranges the data channel by channel, compresses it when asked, and
  holds two events in 4.2 Mbit of RAM;
- commands, triggers and data share the optical link to the DCM;
- an on-board pulser for calibration.

Chosen here, because the description does not give them:
- the single 25 MHz clock;
- the 7-clock ADC latency;
- 4 reset clocks per column;
- the 16-bit word with a tag nibble;
- the packet format and the command format;
- the compression rule (whole channels below a peak threshold are dropped);
- the trigger accept/reject policy, with no post-trigger delay before the SCA is frozen;
- the pulser's step length and trigger delay;
- the reset style.

Not implemented:
- the AGET slow-control (configuration) interface, whose protocol is not given;
- the optical transceiver and its line coding;
- the high-voltage monitoring ADC;
- the DCM itself;
- self-triggering from the AGET's own discriminators (hit register and
  multiplicity output): triggers come only from the DCM or the pulser;
- all analog parts.

Where any of these would connect, the top module has ports. The link ports are plain
word streams, ready for a transceiver wrapper.

## Verification

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each one
ends with a line `TB_RESULT checks=N failures=M`.

- `tb_sca_read_seq`, `tb_adc_capture`, `tb_event_buffer`, `tb_chan_peak_tracker`
  and `tb_event_packer` run at full size. They check slot order, latency
  alignment, the transpose, the peaks, framing, suppression, link stalls, and the
  131,330-clock event length.
- `tb_acq_ctrl`, `tb_cmd_decoder` and `tb_cal_pulser` check the control
  behaviour and its timing clock by clock.
- `tb_fec_top` runs the whole card at 4 x 8 channels x 16 cells. It drives five
  events through the design and compares every word received on the link with
  the pattern played into the ADC ports. It also makes each mechanism happen and
  counts it: accepted triggers, a trigger rejected during a read phase, link
  stalls until both slots are full, a trigger rejected for lack of a slot,
  compression by command, a calibration pulse with its own trigger, and an
  unknown command.
- `tb_fec_top_full` runs the top at its default sizes. It sends one uncompressed
  event, checking the 34,816-clock read phase and 131,330 back-to-back link
  words, then one compressed event. It also checks that the first event is
  complete on the link within 100 ms of its trigger.

`tb/aget_adc_model.sv` is a behavioural stand-in for the four AGETs and their
ADCs. It walks the read order on its own while `sca_read` is high and returns
each slot's level `ADC_LAT` clocks later. `tb/tb_pattern_pkg.sv` defines the
waveform: about one channel in five carries a pulse and the rest stay near
baseline.

To run a testbench with Verilator from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/fec_pkg.sv tb/tb_pattern_pkg.sv tb/tb_fec_top.sv --top-module tb_fec_top
./obj_dir/Vtb_fec_top
```

Substitute another testbench name to run it. The full-size top test takes
seconds of simulation time.

## Changing the design

- Sizes are parameters of `fec_top`, and their defaults live in `rtl/fec_pkg.sv`.
  The RAM depth follows `NSLOT * NCH * NCOL`. Address widths come from `$clog2`,
  so `NCH` and `NCOL` should stay powers of two.
- Going past 4 chips or 64 channels needs a different channel-header layout,
  because chip and channel are packed into 8 bits.
- Going past 4095 channels per event needs a wider end-word count.
- The compression rule sits in one expression, `keep_ch` in `event_packer`. A
  different rule that needs more than the channel peak would also change
  `chan_peak_tracker`.
