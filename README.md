# GPS-timed multi-channel photon counter: FPGA logic

This is synthesizable SystemVerilog for the FPGA logic of a high-speed photometry
data-acquisition card. The card counts photon pulses from up to four detector
channels, for example an infrared and an optical photometer on the same telescope.
It sorts them into time bins from 1 µs to 1023 µs wide, and bin 0 starts exactly
on a chosen second of Universal Time. The counts go into the card's local SRAM as
self-describing records. From there, bus-master transfers through the card's PCI
interface chip move them into PC memory, while new data keeps arriving.

The design follows a published description of a pulsar and cataclysmic-variable
photometer built on a PCI card with an FPGA, a local SRAM and a PCI interface
chip. That description gives the partition into parts, the record layout
(counter widths, the five housekeeping words, 8192 bins per record) and the
timing scheme. It does not give the FPGA logic itself. Everything below the
block level was designed here, and the section "Choices made here" lists
those decisions.

## Where time comes from

The most important property of the design is its absolute timing. Three
signals from a GPS receiver each play a different part:

| Signal | Tells the design | Used by |
|---|---|---|
| IRIG-B time code | *which* second it is (day, hour, minute, second) | `irigb_decoder` |
| 1PPS pulse | *when* each second begins | `obs_control`, `irigb_decoder` |
| 1 or 10 MHz frequency standard | the clock that times the bins | `obs_timer` |

The FPGA's own clock (`clk`) only samples these signals. No bin boundary or
recorded time depends on it. The clock must run faster than twice the
frequency standard, and it must give each bin at least `NCH + 5` cycles. A
40 MHz clock with a 10 MHz standard meets both, with margin at 1 µs bins.

**IRIG-B decoding.** IRIG-B sends one 100-bit frame per second. Each 10 ms bit
cell begins with a high-amplitude burst of 2 ms (a 0), 5 ms (a 1) or 8 ms (a
position marker). After the analog front end, the FPGA sees that burst either as
one long pulse or as one short pulse per 1 kHz carrier cycle. The decoder works
with both forms:

- It samples the line on a 1 µs tick.
- It bridges low gaps shorter than 1.2 ms.
- It measures each burst from its first high sample to its last.
- It sorts the bursts with thresholds at 3.5, 6.5 and 9.5 ms. A longer burst is
  an error.

Two markers in a row mark the start of a frame. After that, every marker must
sit at cells 9, 19, …, 99. Any other symbol there drops the lock and pulses
`frame_err`. Once cell 99 has arrived, the decoder reads the BCD fields and
range-checks them:

- seconds: cells 1–4 and 6–8
- minutes: cells 10–13 and 15–17
- hours: cells 20–23 and 25–26
- day of year: cells 30–33, 35–38 and 40–41

A frame's time is the time of its own leading edge. By the time the frame has
been decoded, that second has already passed. The decoder therefore gives
`sod_next`, the second of day of the *next* 1PPS (frame time + 1 s, wrapping at
midnight). It raises `time_valid` about 0.8 ms before that 1PPS, and the 1PPS
edge clears `time_valid` again.

**Starting on a given second.** Once an instruction has been accepted,
`obs_control` waits in ARMED. At each 1PPS edge it checks for a valid decoded
time with `sod_next` equal to the instructed start second. When both hold, it
pulses `start` and enters RUN. The timer restarts its frequency-standard
prescaler on that pulse, so bin 0 begins on the 1PPS edge plus a fixed delay
of a few clocks. The delay comes from synchronisation and is the same on every
start.

**Bins and counters.** `obs_timer` divides the standard by 10 (10 MHz) or 1
(1 MHz) into a 1 µs tick and closes a bin every `res_us` ticks. It keeps the
three counters that go into each record header:

- master counter, 40 bits: frequency-standard cycles since the start. It lasts
  30.5 h at 10 MHz.
- record counter, 24 bits: the record number.
- bin counter, 32 bits: the number of the bin within the current record.

## Instruction word

The host writes one 32-bit word into the inbound FIFO of the PCI chip:

| Bits | Field | Meaning |
|---|---|---|
| 31:15 | `start_sod` | UT second of day at which to start (0…86399) |
| 14:5 | `res_us` | bin width in µs (1…1023); **0 = stop** |
| 4:2 | `xfer_code` | bus-master transfer size = 512 << code DWORDs (512…65536) |
| 1:0 | `nch_m1` | number of channels − 1 |

Any word with a non-zero bin width does three things:

- it replaces the current configuration;
- it clears the SRAM ring and the error flags;
- it arms the logic, also when an observation is running.

A word with bin width 0 stops the observation.

## Record format

Each record is five housekeeping DWORDs followed by 8192 bins, and each bin
has one 32-bit count per active channel, channel 0 first:

| Word | Content |
|---|---|
| 0 | security word `32'hC415_DA5A`, which marks a header |
| 1 | the instruction word in force |
| 2 | master counter [31:0] |
| 3 | {record counter [23:0], master counter [39:32]} |
| 4 | bin counter |
| 5 … | bin 0 ch 0, bin 0 ch 1, …, bin 8191 ch `nch-1` |

The master and record counters are 40 and 24 bits wide. Packed into words 2
and 3, they let the header carry five quantities in five DWORDs. The header
values are taken when the record opens. The master counter of record *r* is
therefore exactly `r · 8192 · res_us · divider`, and the bin counter is 0. A
different value in either field shows that the host lost data. The last bin of
a record is written before the next record's header.

## Buffering and transfer

`record_writer` sends one word per clock to `sram_buffer`. Writes always go
ahead in the same clock. The SRAM is single-ported, so reads use the remaining
cycles. At 1 µs bins with four channels, writes take about 4 of every 40 cycles.

The SRAM works as a ring. The write pointer runs round the whole memory. The
read side waits until a full transfer of `512 << xfer_code` words is stored,
clamped to half the SRAM, and then reads exactly that many words as one burst.
Meanwhile new data goes into the next region. Read data passes a 4-entry FIFO,
and reads are only issued while that FIFO has room for them. The FIFO feeds
`pci_addon_if`, which writes each word into the PCI chip's outbound FIFO
whenever that FIFO is not full, and pulses `xfer_done` after every transfer.

If the host falls a whole SRAM behind, new words are dropped and the sticky
`overflow` flag is set. If a bin closes before the previous bin's words have
been written, the sticky `overrun` flag is set. With the clock rule above, the
`overrun` flag cannot be set. Both flags, plus the state and a sticky IRIG-B
frame-error flag, are on the `status` port.

## Module map

| File | Role |
|---|---|
| `rtl/chisdas_pkg.sv` | instruction/header/status types, constants |
| `rtl/chisdas_top.sv` | top level, wires the parts below |
| `rtl/daughter_card_if.sv` | 2-flop synchronisers and rising-edge detectors for all TTL inputs |
| `rtl/irigb_decoder.sv` | pulse-width symbol decoder, frame lock, BCD time |
| `rtl/obs_control.sv` | IDLE / ARMED / RUN state machine, start on matching 1PPS |
| `rtl/obs_timer.sv` | µs prescaler, bin/record/master counters |
| `rtl/channel_counter.sv` | per-channel 32-bit photon counters with bin snapshot |
| `rtl/record_writer.sv` | header and bin word serialiser |
| `rtl/sram_buffer.sv` | SRAM ring controller, transfer-sized bursts |
| `rtl/pci_addon_if.sv` | inbound instruction FIFO read, outbound data FIFO write |

Top-level parameters and their defaults:

- `NCH_MAX = 4`: channels.
- `RECORD_BINS = 8192`: bins per record.
- `SRAM_AW = 17`: SRAM address width, 128K × 32 bits. The actual SRAM size is
  not known; 17 is this design's value.
- `US_PER_MS = 1000`: scales the IRIG-B timing. Only a testbench should lower it.

Outside this RTL, and not modelled as logic:

- the detectors and the photon-counter instrument that digitises their pulses;
- the conditioning box: comparators at −0.35 V, +1.5 V and 0 V, monostables,
  and line drivers;
- the GPS receiver;
- the PCI interface chip;
- the SRAM chip;
- the host software.

The testbenches contain simple models of the GPS signals, the PCI chip's FIFOs
and the SRAM. They also contain a behavioural model of the conditioning box
(`tb/scb_model.sv`): one comparator and one non-retriggerable monostable per
line, at the reference levels above.

## Choices made here

The published description leaves the following open. Each is a choice of this
design:

- **Instruction field layout** and the stop command (bin width 0). Re-arming
  while running.
- **Frequency-standard select** is a static pin (`fs_10mhz`). The instruction
  word has no field for it.
- **One DWORD per channel per bin**, with no packing of several channels into
  one word.
- **Security word value**, and the packing of the 40- and 24-bit counters into
  words 2 and 3. The description lists five DWORDs and also a 40-bit counter,
  and this packing satisfies both.
- **Bin counter meaning.** The description says the bin counter is "the bin
  number within the record". Because the header is taken when the record opens,
  the field is normally 0.
- **IRIG-B details** (symbol thresholds, gap bridging, which fields are
  decoded). These come from the IRIG-B standard. Straight-binary seconds and
  control bits are not decoded.
- **SRAM use**: a ring of transfer-sized regions, writes first, a synchronous
  SRAM port with one-cycle read latency.
- **PCI chip interface**: generic FIFO handshakes (empty/read with data one clock
  later, full/write) instead of the chip's exact pin timing. `xfer_done` is
  this design's own signal.
- **Single clock domain.** All GPS and photon inputs are asynchronous to `clk`.
  A photon edge in the clock that closes a bin counts in the new bin.

## Simulating

Every block has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. Shared
testbench models are in the same folder:

- `irigb_gen.sv`: IRIG-B frames and 1PPS;
- `sram_model.sv`: SRAM;
- `scb_model.sv`: comparators and monostables of the conditioning box.

For example:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps --top-module tb_chisdas_top \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/chisdas_pkg.sv tb/tb_chisdas_top.sv
./obj_dir/Vtb_chisdas_top
```

- `tb_chisdas_top` runs the whole design at reduced size: 16-bin records, a
  256-word SRAM, and IRIG-B time scaled by 1/100. It makes three observations.
  The first uses the 10 MHz standard, 2 µs bins and 4 channels. The second
  stops, switches to a 1 MHz standard, and runs 3 µs bins with 2 channels. The
  third lets the SRAM overflow. A corrupted IRIG-B frame follows. Photon
  pulses are placed in each bin by a known formula, and every word that reaches
  the host model is checked. The test also checks that each of these happened:
  the timed start, headers, transfers, writes during a transfer, both standards,
  both channel counts, stop, back-pressure, overflow and frame error. It runs
  in a few seconds.
- `tb_chisdas_full` runs with every parameter at its default: real IRIG-B
  timing, 8192-bin records, a 128K-word SRAM, 1 µs bins, 4 channels and
  512-word transfers. It locks to the time code, starts on the 1PPS of
  12:00:02, and checks all 32,773 words of the first record plus the next
  header. It simulates about 80 million clocks and takes about a minute.
- `tb_chisdas_workloads` also runs at the defaults. It runs two observing
  set-ups back to back on the 1 MHz standard with an 8 MHz clock:
  - a pulsar set-up: 2 channels, 20 µs bins, 4096-word transfers;
  - a dwarf-nova set-up: 1 channel, 100 µs bins, 512-word transfers.

  A stop word separates the two runs. For each run the test checks the
  whole first record and the next header, the start second, the transfer
  count, and the record length in clocks. It takes about half a minute.
- `tb_scb_frontend` drives analog-like waveforms through the conditioning-box
  model into the input interface, the time base and the IRIG-B decoder. The
  IRIG-B input is an amplitude-modulated sine (2.5 V / 0.75 V peaks), which
  the +1.5 V comparator turns into one pulse per high carrier cycle. The
  frequency standard is a sine. The photon pulses are 0 to −0.7 V triangles,
  some with ringing. The test checks the decoded time, one edge per
  standard cycle, and exactly one count per photon pulse.

## What the design was checked against

The evaluated uses of the original instrument are:

- simultaneous two-channel 20 µs photometry of the Crab pulsar over about 4 h;
- single-channel 100 µs photometry of a dwarf nova over about 2 h;
- the claimed limits of 1 µs bins and 4 channels.

All three fit the default configuration:

- A 4 h run at 20 µs is about 88,000 records, well inside the 24-bit record
  counter.
- The 40-bit master counter lasts 30.5 h at 10 MHz.
- 1 µs × 4 channels is 16 MB/s, far below the PCI bus rate.

The two observing set-ups and the 1 µs, 4-channel limit are each simulated
for one full record at the default parameters (`tb_chisdas_workloads`,
`tb_chisdas_full`). The hours-long runs are covered only by the arithmetic
above; a record is the same at every bin width, so only the counter values
differ.
