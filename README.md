# Dragon: readout logic for a 7-PMT Cherenkov-camera cluster

A camera for a large imaging Cherenkov telescope has close to two thousand
photomultiplier tubes (PMTs). They are grouped in clusters of seven, and each
cluster has its own readout board. An air-shower flash lasts a few
nanoseconds, so every pixel has to be sampled at about a gigahertz. Flash ADCs
that fast cost too much money and power for thousands of channels. The board
therefore stores each waveform in an analog memory, the DRS4 switched-capacitor
array. The DRS4 samples into a ring of capacitors continuously. When a trigger
arrives the ring is frozen, and only the short window of interest is read out
through a slow ADC at 33 MHz.

This repository holds the digital logic of such a readout unit, in
SystemVerilog. The unit's hardware is described in the literature on the
"Dragon" readout for the CTA Large Size Telescope. The logic does four things:

- it runs the eight DRS4 chips: it keeps them sampling, freezes them on a
  trigger, and steps out the region of interest (ROI);
- it collects the 16 digitised lanes of an event into a framed event record;
- it buffers events in an external 18 Mbit SRAM and streams them over TCP,
  through the SiTCP hardware TCP/IP core, onto Gigabit Ethernet;
- it carries slow control over the same Ethernet link: trigger-threshold and
  DRS4 bias DACs, plus a serial link to the CPLD on the slow-control board.
  That CPLD sets the PMT high voltage, fires test pulses, and reads the
  monitor ADC and a temperature/humidity sensor.

The source describes the board and what each device does. It does not describe
the logic inside the FPGA or the CPLD. Every state machine, protocol, event
format and register map below is therefore this design's own. They are built
to do what the board description requires, with the board's numbers: 8 DRS4
chips, 1024 cells per channel, 4 channels cascaded into a 4096-cell ring,
33 MHz readout, an 18 Mbit SRAM, 60-cell ROI readout, and 7 PMTs in high and
low gain. The section "Where this departs from, or adds to, the board
description" lists the choices.

## Block structure

```
            L1 trigger                     SiTCP register bus (RBCP)
                |                                   |
         trigger_manager <---- busy ----+       reg_file ---- spi_dac_loader -> threshold DAC
                | accept                |           |   \---- spi_dac_loader -> DRS4 bias DAC
                v                       |           |
 DRS4 x8 <-> drs4_readout ---lanes---> event_builder       sc_link_master <-serial-> slow_control_cpld
 + ADCs        (stop position,          | framed words                                 |- spi_dac_loader -> HV DAC
               ROI stepping)            v                                              |- mon_adc_scanner -> monitor ADC
                                    sram_fifo <-> 18 Mbit SRAM                          |- i2c_sensor_reader -> T/RH sensor
                                        |                                              '- test-pulse trigger
                                    tcp_tx_bridge -> SiTCP TCP transmit FIFO -> PHY
```

| file | what it is |
|---|---|
| `rtl/dragon_pkg.sv` | sizes shared by all blocks, event word type |
| `rtl/dragon_top.sv` | the whole unit, all blocks wired together; external chips are ports |
| `rtl/trigger_manager.sv` | trigger acceptance, busy veto, event number, time stamp, dead-time counters |
| `rtl/drs4_readout.sv` | DRS4 sampling control, stop-position read, ROI stepping, ADC capture |
| `rtl/event_builder.sv` | on-chip event buffer and event framing |
| `rtl/sram_fifo.sv` | external SRAM used as a large FIFO |
| `rtl/tcp_tx_bridge.sv` | 16-bit words to bytes into SiTCP |
| `rtl/spi_dac_loader.sv` | loads an 8-channel serial DAC (used three times) |
| `rtl/reg_file.sv` | register bank on the SiTCP register bus |
| `rtl/sc_link_master.sv` | FPGA end of the serial link to the CPLD |
| `rtl/slow_control_cpld.sv` | CPLD logic of the slow-control board |
| `rtl/sc_link_slave.sv`, `rtl/mon_adc_scanner.sv`, `rtl/i2c_sensor_reader.sv` | parts of the CPLD logic |

All blocks run on one system clock. `dragon_top` assumes 133 MHz, because
dividing it by 4 gives the 33 MHz readout clock. Reset is synchronous and
active low. Every block that exchanges data uses a valid/ready stream.

## Freezing the ring and reading the window

This part is the hardest to follow, and every other timing follows from it.

**The ring.** Each DRS4 channel has 1024 sampling capacitors. Four channels
are cascaded, so each signal lands in a ring of 4096 cells. At 1 GS/s that is
4 µs of history, long enough to wait for a telescope-array coincidence before
deciding to read. Eight chips with eight signal channels each, cascaded by
four, give **16 lanes**: seven PMTs in high gain, seven in low gain, and two
spare. Which lane carries which PMT is board wiring and does not concern the
logic. All chips share the control lines, so all 16 lanes freeze at the same
cell.

**Pins used** (a simplified version of the DRS4's own protocol):

| pin | meaning |
|---|---|
| `DENABLE` | domino wave runs; high from the first clock after reset |
| `DWRITE` | cells are being written; low freezes the ring |
| `RSRLOAD` | one-clock pulse that loads the readout shift register |
| `SRCLK` | readout shift clock; it also clocks the ADCs |
| `SROUT` | serial stop position from the chip |

**Sequence after an accepted trigger** (`drs4_readout`, RO_DIV = 4 system
clocks per SRCLK period):

1. `DWRITE` drops, which freezes the ring. After STOP_SETTLE = 8 clocks,
   `RSRLOAD` pulses.
2. 12 SRCLK periods: before each rising edge, `SROUT` is sampled. This gives
   the 12-bit stop position, most significant bit first. The stop position is
   where the ring stopped, and it is the first cell read.
3. `roi_len + ADC_LAT − 1` SRCLK periods: each rising edge moves the analog
   output to the next cell and clocks the ADCs. The ADC pipeline delay is
   ADC_LAT = 3 edges, so after edge *j* (j ≥ ADC_LAT) the ADC outputs hold
   cell *j − ADC_LAT*. The 16 lanes are captured in the last system clock of
   that SRCLK period, well after the ADC output has settled, and passed on
   with the cell index. Cells run from the stop position upward and wrap at
   4096.
4. `DWRITE` rises again, sampling resumes, and `done` pulses.

From `start` to `done` takes `8 + 1 + 4·(12 + roi_len + ADC_LAT − 1) + 1`
clocks. For the default ROI of 60 cells that is 306 clocks, 2.3 µs at
133 MHz. The testbench checks this count and the 4-clock spacing of the
samples.

## Event record

The 16 lanes arrive together at 33 MHz: 16 × 12 bits every 30 ns. One
18-bit SRAM word per clock cannot carry that. `event_builder` therefore
writes each lane vector into an on-chip buffer of 4096 × 192 bits, addressed
by cell. After the readout it drains the buffer lane by lane, one 16-bit word
per clock:

| word | content |
|---|---|
| 0 | `0xD4A1` (event marker) |
| 1, 2 | event number, high half first |
| 3, 4 | trigger time stamp in system clocks, high half first |
| 5 | stop position (0–4095) |
| 6 | ROI length *n* |
| 7 … | for lane 0..15, for cell 0..*n*−1: `{lane[3:0], adc[11:0]}` |

An event has 7 + 16·*n* words, which is 967 words (1934 bytes) for *n* = 60.
Inside the logic every word also carries a start-of-event and an end-of-event
flag. Those two flags fill the 18-bit SRAM word exactly. On the TCP stream
the words are sent high byte first, and the flags are dropped: the marker and
the ROI length make the stream self-delimiting.

## Trigger acceptance and dead time

`trigger_manager` accepts a trigger only when the unit is idle. "Busy" lasts
from the acceptance until the event builder's buffer is empty. A trigger that
arrives while busy is counted as lost. The unit counts busy clocks, so the
dead-time fraction is `dead_cycles / now`. Both counters can be read over the
register bus.

With one event buffer, the busy time per event is the readout plus the drain:
306 + 967 + a few pipeline clocks = **1277 clocks = 9.6 µs**. On the hardware
the dead time for 60-cell readout was measured at 0.9 % at a 1 kHz trigger
rate and 5.4 % at 7 kHz. `tb_dead_time` runs the whole unit with random
triggers at those rates and measures 1.0 % and 6.1 %. The agreement depends
on the assumed 133 MHz clock and on the drain running at one word per clock.
That drain rate is why `sram_fifo` gives writes priority: with alternating
priority the drain would take twice as long, and the dead time would double.

## Buffering and transmission

`sram_fifo` treats the external SRAM as a ring buffer: 1M × 18 bits, single
port, pipelined, with read data RD_LAT = 2 clocks after the address. Each
clock it issues at most one access. A write of an incoming word always wins.
A read is issued only when the 4-entry on-chip skid buffer has room for it
and for every read still in flight, so no returning word is dropped. At
1934 bytes per event the SRAM holds about 1084 events. That buffer covers the
time when the TCP connection is slow or closed.

`tcp_tx_bridge` writes one byte per clock into SiTCP's transmit FIFO. It
pauses while SiTCP reports the FIFO full or no connection is open. It takes
two clocks per word, so it offers 133 MB/s, more than Gigabit Ethernet
carries. At 7 kHz and 60 cells the data rate is only 13.5 MB/s.

## Slow control

**Register bank** (`reg_file`, SiTCP register bus, one-clock acknowledge,
multi-byte fields high byte first):

| address | content |
|---|---|
| 0x00 | bit 0: trigger enable |
| 0x01 (write) | pulses: bit 0 software trigger, bit 1 load threshold DAC, bit 2 load DRS4 DAC, bit 3 clear counters, bit 4 send CPLD command |
| 0x02–0x03 | ROI length (reset value 60) |
| 0x10–0x1F | 8 × 16-bit trigger thresholds |
| 0x20–0x2F | 8 × 16-bit DRS4 DAC values |
| 0x30–0x32 | 24-bit CPLD command |
| 0x40 / 0x44 / 0x48 / 0x4C | last event number / lost triggers / busy clocks / last time stamp (32 bits each) |
| 0x50 | words held in the SRAM |
| 0x54–0x56 | last CPLD reply |
| 0x57 | busy flags: bit 0 readout, 1 event builder, 2 threshold DAC, 3 DRS4 DAC, 4 CPLD link |
| 0x58 | running clock count |

**DACs.** `spi_dac_loader` writes all 8 channels of a serial DAC, one 24-bit
SPI frame per channel (mode 0, MSB first). Each frame is `{4'h3, channel[3:0],
value[15:0]}`. The same module drives the trigger-threshold DAC, the DRS4
bias DAC, and, inside the CPLD, the high-voltage DAC.

**CPLD link.** One transfer keeps chip select low for 48 bit periods of 16
clocks each. The first 24 bits carry the command `{write, addr[6:0],
data[15:0]}` out. The last 24 bits bring back the reply `{status[7:0],
data[15:0]}`. The CPLD samples the link with its own clock through
synchronisers, so half a bit period is left for it to answer. The CPLD's
registers:

| address | content |
|---|---|
| 0x00–0x07 | HV DAC values; writing 0x08 loads them into the DAC |
| 0x10 (write) | fire one test pulse; 0x11: test-pulse period in clocks (0 = off) |
| 0x20–0x27 | latest monitor-ADC reading per channel (HV and anode currents) |
| 0x30 / 0x31 | temperature / humidity; writing 0x32 starts a sensor read; 0x33 sensor status {new reading, busy, no acknowledge} |
| 0x3F | identifier 0x5C01 |

A reply's status is 0x00 for a known address and 0xFF for any other. The
monitor ADC is scanned continuously: each 16-bit frame sends the channel
number and receives that channel's 12-bit code. A sensor read is one I2C
transaction: address 0x40 with the read bit, then four bytes.

## Where this departs from, or adds to, the board description

Taken from the board description: the block structure (FPGA with DRS4, ADCs,
threshold DAC, DRS4 DAC, SRAM, SiTCP Ethernet, and a CPLD for the HV DAC,
monitor ADC, I2C climate sensor and test pulses), 8 DRS4 chips, 1024 cells ×
4 cascaded = 4096, 33 MHz readout, the 18 Mbit SRAM, 7 PMTs in two gains, and
a ROI of 60 cells.

This design's own choices:

- the DRS4 pin sequence, simplified from the real chip's;
- STOP_SETTLE, ADC_LAT, and a 12-bit ADC;
- the 133 MHz clock;
- the event format and the single event buffer;
- the SRAM organisation (1M × 18) and its latency;
- write-first arbitration in the SRAM FIFO;
- the byte-wide SiTCP interfaces, modelled on that core's usual user ports;
- every register map;
- the DAC frame, the CPLD link protocol, the monitor-ADC frame and the I2C
  byte layout;
- starting the ROI at the stop position, with no programmable trigger-delay
  offset.

Not built:

- the analog chain (preamplifier and main amplifiers: high gain ×9, trigger
  ×4, low gain ×¼);
- the analog and digital L0/L1 trigger mezzanines: their L1 output enters as
  `trig_in`;
- the data path to the backplane through the I/O connector, because nothing
  about its protocol is known;
- the SiTCP core and the PHY themselves;
- the DRS4 offset and timing calibration, which is done offline.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/dragon_pkg.sv tb/dragon_tb_pkg.sv \
  tb/tb_dragon_top.sv --top-module tb_dragon_top -o sim
obj_dir/sim
```

| testbench | what it shows |
|---|---|
| `tb_dragon_top` | the whole unit at its default sizes. It programs the DACs, runs CPLD commands (HV, test pulse, monitor, sensor), sends L1 and software triggers, some while busy, changes the ROI, throttles and closes TCP, and decodes every event byte for byte against the DRS4 model. It counts 15 mechanisms and requires each to happen. |
| `tb_dead_time` | random triggers at 7 kHz and 1 kHz with the 60-cell ROI; prints the dead-time fraction (about 7 s) |
| `tb_drs4_readout` | stop position, cell order and values, ring wrap, 33 MHz sample spacing, start-to-done clock count |
| `tb_event_builder` | header and sample words, flags, one word per clock, random back-pressure |
| `tb_sram_fifo` | filling to full, random traffic, ordering; also a short run of the 1M-word instance |
| `tb_tcp_tx_bridge` | byte order, two bytes per word at full rate, no write while full or closed |
| `tb_trigger_manager` | cycle-by-cycle comparison with a reference under random triggers and busy |
| `tb_spi_dac_loader`, `tb_reg_file`, `tb_sc_link_master`, `tb_slow_control_cpld` | the control side |

The off-board parts are behavioural models in `tb/`: `drs4_adc_model` (with
the cell contents given by `dragon_tb_pkg::drs_cell_value`), `sram_model`,
`dac_model`, `mon_adc_model` and `i2c_sensor_model`. The simulator is
two-state, and every register read in the logic is reset.

## Changing it

Sizes are in `dragon_pkg` (cells, cascade, chips, lanes, ADC width, SRAM
size) and in block parameters:

- `drs4_readout`: RO_DIV, ADC_LAT and STOP_SETTLE;
- `event_builder`: MAX_ROI;
- `sram_fifo`: AW, DW and RD_LAT;
- `spi_dac_loader`: N_CH and CLK_DIV;
- `sc_link_master`: CLK_DIV, which must leave the CPLD about 6 clocks to
  answer;
- `slow_control_cpld`: the device clock dividers;
- `reg_file`: ROI_DEFAULT.

With a different system clock, change RO_DIV so that SRCLK stays at or below
33 MHz, the DRS4's maximum readout rate. A second event buffer in
`event_builder` would take the drain out of the dead time, leaving only the
2.3 µs readout.
