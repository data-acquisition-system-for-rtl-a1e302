# Counting readout for a 146-strip silicon proton counter

A beam monitor for proton therapy can count protons one by one instead of
integrating ionisation charge as a gas chamber does. The detector behind this
RTL is a thin silicon sensor (LGAD) split into 146 strips of 180 µm pitch and
2.7 cm length. Each strip feeds a fast charge amplifier and discriminator
channel (six chips of 24 channels), whose dead time is at most 10 ns, so a
strip can deliver up to about 10^8 pulses per second. The discriminator
outputs travel as LVDS lines to three FPGAs, 48 strips each, which count the
pulses and send the counts to a PC over Gigabit Ethernet. Two of the 146
strips go to analog debug outputs and are not counted.

This repository holds synthesizable SystemVerilog for the counting logic of
those FPGAs: everything between the FPGA input deserializers and the
Ethernet MAC. Each FPGA runs a 100 MHz core clock and samples every
discriminator line at 1 GHz, so the logic sees, per strip and per clock, a
word of ten 1 ns samples. From these words it keeps a raw integral count per
strip, stamps periodic readings with a time, and streams them out together
with the threshold settings.

## Block structure

```
                      proton_counter_daq  (3 units, 144 strips)
 samples[0..47]   --> fpga_daq #0 --+--> record stream 0 --> Ethernet MAC (not included)
 samples[48..95]  --> fpga_daq #1   |    thresholds 0     --> DAC drivers (not included)
 samples[96..143] --> fpga_daq #2   +--  register port 0  <-- command decoder (not included)

 fpga_daq
   config_regs ---- run, clear, period ----+-------------------------+
        |                                  v                         v
        |  gth/lth             readout_timer --tick--> record_packer --> m_valid/m_data/m_last
        +------------------------------------------------^  | snap_req   ^ snap_count, snap_ts
                                                            v            |
   samples[48] --------------------------------------> counter_bank -----+
                                                       (48 x pulse_counter, timestamp)
```

| File | Role |
|------|------|
| `rtl/daq_pkg.sv` | sizes, widths, register map, record magic |
| `rtl/pulse_counter.sv` | rising-edge counter of one strip, ten samples per clock |
| `rtl/counter_bank.sv` | 48 counters, timestamp, one-clock snapshot into shadow registers |
| `rtl/readout_timer.sv` | programmable periodic readout tick |
| `rtl/config_regs.sv` | host registers: run/clear, period, thresholds, status |
| `rtl/record_packer.sv` | snapshot handshake and record streaming with valid/ready |
| `rtl/fpga_daq.sv` | one FPGA's counting unit |
| `rtl/proton_counter_daq.sv` | top level: three units side by side |

## Counting pulses from 1 GHz samples

The discriminator output is a level: high for the length of a pulse (a few
ns up to the 10 ns dead time, longer when pulses pile up), low otherwise.
`pulse_counter` counts a pulse at each low-to-high transition of the 1 ns
sample stream. Within a word the previous sample of bit *i* is bit *i−1*; for
bit 0 it is the last sample of the previous word, which the counter keeps in
one flip-flop. Hence:

* a pulse whose rising edge falls between two words is counted once, in the
  word that holds its first high sample;
* a pulse that stays high across one or more whole words is counted once;
* several pulses in one word are all counted (ten samples hold at most five
  rising edges, e.g. `0101010101` after a low sample);
* two pulses are separated only if at least one low sample (1 ns) lies
  between them. Pulses that merge at the discriminator are one pulse here too:
  correcting such pile-up is left to the neighbouring-strip logic described
  below under what is not included.

The per-word edge count (`hits`, 0..5) is added to a 32-bit counter that
wraps. The count is a *raw integral*: it is never reset by a reading, and the
PC obtains rates from differences of successive readings, which are correct
across a wrap as long as fewer than 2^32 pulses (43 s at 100 MHz) occur
between two readings. `clear` zeroes the count but keeps the edge history,
so a line that is high at the moment of a clear does not produce a false
count afterwards.

Timing: a word presented in clock *t* is in `count` from clock *t+1*.

## Readings, snapshot and overruns

A reading must give all 48 strips of a unit over the same time interval.
`counter_bank` therefore copies every count and the timestamp into shadow
registers on the same clock edge (`snap`), while the live counters carry on
undisturbed. The timestamp counts 100 MHz cycles (10 ns ticks, 48 bits, about
33 days before it wraps) while the unit runs.

The handshake between the blocks is:

| clock | event |
|-------|-------|
| *t* | `readout_timer.tick`; if `record_packer` is idle it raises `snap_req` in the same cycle |
| *t+1* | shadow registers hold counts up to the words of clock *t−1* and the timestamp of clock *t*; `snap_valid` |
| *t+1* | packer copies the overrun count and all thresholds |
| *t+2* | first record word offered on `m_data` |
| *t+68* | last word accepted if `m_ready` stayed high (67 words) |

If a tick arrives while a record is still pending (waiting for its snapshot
or being sent), no snapshot is taken and the overrun counter increments. No
pulse is lost by this: the counters keep running, and the next record simply
covers two periods; its timestamp shows the real interval. This happens when
the period is shorter than a record (67 cycles) or when the Ethernet side
holds `m_ready` low for long.

The readout timer ticks every `period` cycles while running (first tick
`period` cycles after run or clear); a period of 0 stops the ticks. The
reset value is 100 000 cycles, i.e. one reading per millisecond.

## Record format

One record per reading, as 32-bit words with `m_valid`/`m_ready`/`m_last`;
a word on offer does not change until it is taken (checked by an assertion
in `record_packer`).

| word | content |
|------|---------|
| 0 | `{16'hCA7C, fpga_id[3:0], 4'h0, N_CH[7:0]}` |
| 1 | sequence number (increments per record, from 0 after reset) |
| 2 | overruns before this record's snapshot |
| 3 | timestamp bits 47:32 (upper bits zero) |
| 4 | timestamp bits 31:0 |
| 5 … 52 | raw integral count of channel 0 … 47 |
| 53, 54 | global threshold code of chip 0, 1 (16 bits, zero-extended) |
| 55 … 66 | local threshold codes, four 8-bit codes per word, channel 4k in bits 7:0 |

With the default 1 ms period this is 2 144 bits per millisecond per unit,
about 2 Mb/s against a 1 Gb/s link.

## Host registers

Each unit has a register port (`host_wr`, `host_addr`, `host_wdata` written
on a clock edge; `host_rdata` combinational from `host_addr`), meant for a
command decoder behind the Ethernet link.

| address | name | access | content |
|---------|------|--------|---------|
| 0x00 | CTRL | R/W | bit 0 run; bit 1 clear (write 1: one-clock pulse that zeroes counters, timestamp and timer) |
| 0x01 | PERIOD | R/W | readout period in clock cycles (reset 100 000) |
| 0x02 | STATUS | R | overrun count |
| 0x10, 0x11 | GTH0, GTH1 | R/W | global threshold code of the unit's two chips |
| 0x40 … 0x6F | LTH0 … LTH47 | R/W | local threshold code of each channel |

Any threshold write raises `dac_load` for one clock, when the new value is
already on the `gth`/`lth` outputs, for the driver that loads the board DACs
and the chips' channel DACs.

## What is not included, and why

* **Input deserializers.** The 1 GHz sampling is done by the FPGA's built-in
  SERDES primitives and clocking. The RTL starts from their 10-bit words; the
  testbenches produce those words from a 1 ns pulse model.
* **Pile-up correction from neighbouring strips.** The detector's FPGAs
  combine signals of adjacent strips to reduce the counting loss when pulses
  overlap, but the combination rule is not published, so it is not
  implemented. The per-word edge counts (`pulse_counter.hits`) are where such
  logic would attach; since the strips are split over three FPGAs by blocks
  of 48, the strips at a unit boundary would need their neighbour's samples.
* **Ethernet MAC/PHY, command decoding, DAC and chip-configuration
  drivers.** Their protocols and parts are not specified; the RTL exposes a
  record stream, a register port and the threshold codes instead.
* **Sensor, front-end chips and board.** Analog parts.

## Choices made here

The following are this design's own and may be changed freely: 32-bit
counters, 48-bit timestamp, 16-bit global and 8-bit local threshold codes,
the register map, the record layout and magic word, the valid/ready stream,
the overrun policy, the 1 ms default period, synchronous active-high reset,
the assignment of strips 48f … 48f+47 to unit f, and a shared clock for the
three units.

One ambiguity in the detector description: it mentions three onboard DACs
for the global thresholds but also "one per chip" for six chips. The
registers follow "one per chip" (two per unit); how six codes map onto the
physical DACs is left to the DAC driver.

The counting itself is exact: every rising edge in the sample stream is
counted. Efficiency figures of the real system (pile-up, dead time, noise,
threshold uniformity) come from the analog front end and are outside this
RTL.

## Simulation

Every testbench in `tb/` is self-checking, stops itself with a watchdog and
ends with a line `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
          rtl/daq_pkg.sv tb/tb_proton_counter_daq.sv --top-module tb_proton_counter_daq
./obj_dir/Vtb_proton_counter_daq
```

Replace the testbench name for the others:

| testbench | what it checks |
|-----------|----------------|
| `tb_pulse_counter` | edge counts against a sample-by-sample reference: bursts of five pulses, edges at word boundaries, long pulses, `en`, clear while high |
| `tb_counter_bank` | 48 strips, live counts and timestamp every cycle, random snapshots, run and clear |
| `tb_readout_timer` | tick spacing for periods 1 … 1000, first tick, period 0, clear |
| `tb_config_regs` | all registers by output and readback, clear pulse, `dac_load`, unmapped addresses |
| `tb_record_packer` | record contents word by word, latency (first word 2 clocks after tick) and length (67 clocks), stall stability, overruns |
| `tb_fpga_daq` | one unit end to end with a 2 000-cycle period, also live counts every cycle |
| `tb_proton_counter_daq` | all 144 strips at default parameters: two 1 ms readings per unit, then forced overruns with back-pressure, new thresholds, clear and restart |
| `tb_rate_workloads` | one unit at pulse rates of 4.9 MHz, 24 MHz and 100 MHz per strip |

The full-size test simulates about 2.1 ms of beam (210 000 clocks, 144
strips) in a few seconds. Each end-to-end testbench also counts how often
each mechanism occurred (records, back-pressure stalls, overrun records, DAC
loads, multi-pulse words, boundary edges, long pulses) and fails if one
never did. The end-to-end testbenches observe each unit's internal snapshot
request (`u_fpga.snap_req`) by hierarchical reference to know which
reference counts a record must carry.

To change the size, edit `daq_pkg` or override the parameters of
`proton_counter_daq` (`N_FPGA`, `N_CH`, `N_CHIP`, `SER_RATIO`,
`DEFAULT_PERIOD`); the record length follows as
`5 + N_CH + N_CHIP + ceil(N_CH / 4)` words.
