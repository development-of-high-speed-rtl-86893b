# SEABAS2 user-FPGA readout path for INTPIX SOI pixel sensors

INTPIX4 and INTPIX5 are integration-type X-ray pixel sensors made in a
silicon-on-insulator (SOI) CMOS process. They are large: 832 x 512 and
1408 x 896 pixels. To read them fast, each sensor is split into blocks, and
every block drives its own analog output. INTPIX4 has 13 blocks of
64 x 512 pixels, and INTPIX5 has 11 blocks of 128 x 896. On the SEABAS2
readout board, every block output goes to its own 12-bit ADC channel. A
"user" FPGA collects the ADC codes. A second FPGA runs SiTCP, a hardware
TCP/UDP stack, and sends the data over Gigabit Ethernet to a DAQ PC.

This RTL is the user-FPGA part of that chain. Its work is:

1. Time the sensor: an exposure (integration) window, then a scan that steps
   through every pixel of a block, with all blocks scanned together.
2. Sample every active ADC channel once per pixel.
3. Turn each 12-bit code into a 16-bit word with a 4-bit channel ID on top.
4. Hold each channel's words in its own FIFO.
5. Merge the FIFOs into the SiTCP TCP byte stream.

The PC controls a run through a small register file on the SiTCP UDP register
bus (RBCP).

The design targets the sensor's own limit for INTPIX4, which is 80 frames per
second (fps). At that rate the data amount to 545 Mbit/s. This is more than
half of what one Gigabit Ethernet link can carry, so the datapath can never
stall on its own. It waits only when SiTCP pushes back.

```
             +-------------------+        +-----------------+
 rbcp_*  <-> |    rbcp_regs      |------->|readout_sequencer|--> integ_o, scan_o,
             | (run config,      | start/ | (frame timing)  |    pix_addr_o, sample_o
             |  status, counters)| stop   +-----------------+
             +-------------------+                 | sample
                                                   v
 adc_data_i[0..N-1] (12 bit) ------------->  adc_capture  (tag: {ID[3:0], ADC[11:0]})
                                                   |  one word per active channel
                                                   v
                                  channel_fifo x N (1024 x 16 each)
                                                   |
                                                   v
                                           tcp_tx_merger ----> tcp_tx_wr_o / tcp_tx_data_o[7:0]
                                      (channel 0..n-1, MSB first)   <---- tcp_open_ack_i, tcp_tx_full_i
```

## The frame: integrate, then scan

A frame has two phases. During the integration phase the pixels collect
charge. During the scan phase they are read out one by one. The two phases do
not overlap, and there is no idle time between them or between frames:

```
frame period = INTEG + PIX x SCAN   clock cycles
```

At the default 125 MHz clock, INTPIX4 has these values:

* INTEG = 2 ms = 250 000 cycles.
* PIX = 64 x 512 = 32 768 pixels per block.
* SCAN = 320 ns per pixel = 40 cycles.

The frame then takes 1 560 720 cycles (12.486 ms), which is 80.1 fps. This
matches the sensor limit quoted for INTPIX4: 80 Hz, with 320 ns per pixel and
2 ms of exposure. INTPIX5 uses a 4 ms exposure and 114 688 pixels per block.
Its frame takes 5 087 520 cycles (40.7 ms).

`readout_sequencer` holds `integ_o` high for exactly INTEG cycles. It then
holds `scan_o` high for PIX x SCAN cycles. `pix_addr_o` holds each pixel
index for SCAN cycles. `sample_o` pulses once per pixel, in the last cycle of
the pixel period, when the sensor output has had the longest time to settle.
`frame_done_o` pulses together with the last sample of a frame.

A run is a number of frames (NFRAMES), with 0 meaning "until STOP". A STOP
does not cut a frame short. The sequencer finishes the frame in progress and
then goes idle. An INTEG value of 0 is treated as 1.

The outputs that drive the sensor are generic strobes. They are not the
INTPIX pin-level control signals, which are not described here. A board
design adapts them to the sensor's actual clocking.

## Pixel words and the byte stream

Every sample becomes one 16-bit word (`soi_daq_pkg::pixel_word_t`):

```
 15      12 11                         0
+----------+----------------------------+
|  ch_id   |        ADC code            |
+----------+----------------------------+
```

`ch_id` is the 0-based channel number, 0 to 15. A word leaves the board as
two bytes, most significant byte first. So the channel ID is the first thing
the PC sees of every word.

`tcp_tx_merger` serves the active channels in a fixed cycle, 0, 1, ..., n-1,
then 0 again, one word per turn. The PC therefore receives pixel p of block
0, then pixel p of block 1, and so on, then pixel p+1. All channels are
written on the same sample strobe, so they always hold the same number of
words. The merger can therefore wait for the current channel without starving
the others.

The ID in each word still lets the PC sort the data if words were ever lost.
Words are lost only on FIFO overflow, described below.

## Rates, FIFOs and back-pressure

The rate the data arrive and the rate the link can take are set by these
numbers:

| | INTPIX4 | INTPIX5 |
|---|---|---|
| active channels | 13 | 11 |
| bytes per 40-cycle pixel period | 26 | 22 |
| rate during the scan | 650 Mbit/s | 550 Mbit/s |
| rate averaged over a frame | 545 Mbit/s | 496 Mbit/s |
| link capacity (1 byte per 8 ns clock) | 1000 Mbit/s | 1000 Mbit/s |

The merger can write one byte per clock, so while SiTCP accepts data the
FIFOs never hold more than a few words.

The FIFOs are there for the time when SiTCP cannot accept data:

* `tcp_tx_full_i` is high: the TCP send buffer is full, for example because
  the PC reads slowly.
* `tcp_open_ack_i` is low: no connection is open.

In both cases the merger writes nothing, and the FIFOs keep filling at the
sample rate. Each FIFO holds 1024 words, which covers about 41 us of scan
with no link at all. After that, a word written to a full FIFO is dropped.
The FIFO keeps the older words it already holds.

Every dropped word adds 1 to the DROPCNT register and sets the overflow bit
in STATUS. Both stay set until the PC writes CLEAR. The merger asserts
`stall_o` whenever it has a word to send but SiTCP is not ready.

## Run control: the RBCP registers

SiTCP turns each UDP register access into one RBCP bus cycle:

* the bus carries a 32-bit byte address, a one-cycle `rbcp_we_i` or
  `rbcp_re_i`, and 8-bit data;
* `rbcp_regs` answers with a one-cycle `rbcp_ack_o` on the next clock, with
  read data on `rbcp_rd_o`.

Registers of more than one byte are big-endian: the lowest address holds the
most significant byte.

| address | name | access | meaning | reset |
|---|---|---|---|---|
| 0x00 | CTRL | W | b0 START, b1 STOP, b2 CLEAR (DROPCNT and overflow flag) | - |
| 0x01 | STATUS | R | b0 busy, b1 integrating, b2 scanning, b3 overflow seen | 0 |
| 0x02 | N_CH | RW | active ADC channels, held to 1..16 | 13 |
| 0x04-07 | INTEG | RW | integration window, clock cycles | 250 000 |
| 0x08-0B | PIX | RW | pixels per channel per frame | 32 768 |
| 0x0C-0F | NFRAMES | RW | frames per run, 0 = until STOP | 1 |
| 0x10-11 | SCAN | RW | clock cycles per pixel | 40 |
| 0x14-17 | FRAMECNT | R | frames completed in the current run | 0 |
| 0x18-1B | DROPCNT | R | pixel words dropped by full FIFOs | 0 |

Addresses that are not in the table read as 0 and ignore writes, but they
are still acknowledged.

The sequencer latches the timing registers at START, and the top latches
N_CH at START. Writing them during a run has no effect until the next run.

The reset values are an INTPIX4 run, so after reset a single write of 0x01
to CTRL reads out one INTPIX4 frame. To read INTPIX5 with a 4 ms exposure,
set these registers before START:

* N_CH = 11
* INTEG = 500 000
* PIX = 114 688

## Modules and files

| file | what it is |
|---|---|
| `rtl/soi_daq_pkg.sv` | word type, configuration struct, state enum, register addresses, INTPIX4 reset values |
| `rtl/readout_sequencer.sv` | frame timing (integration, scan, sample strobe, frame count, STOP) |
| `rtl/adc_capture.sv` | samples the ADC channels on the strobe and adds the channel ID |
| `rtl/channel_fifo.sv` | single-clock show-ahead FIFO with drop-on-full and an overflow pulse |
| `rtl/tcp_tx_merger.sv` | round-robin merge of the FIFOs into SiTCP bytes, back-pressure handling |
| `rtl/rbcp_regs.sv` | RBCP register file |
| `rtl/seabas_user_fpga.sv` | top: connects the above, N_CH FIFOs, drop counter |

The top's parameters are:

* `N_CH`: number of ADC channels built, default 16, at most 16 because of
  the 4-bit ID.
* `FIFO_DEPTH`: words per channel FIFO, default 1024.
* The register reset values, which default to the INTPIX4 numbers.

Everything runs on one clock with a synchronous active-low reset. The design
assumes this clock is 125 MHz. Only the default register values depend on
that: the time values are counts of cycles, so at another clock frequency
INTEG and SCAN must be set to match.

At the default size the design synthesizes to about 1 100 flip-flops and
16 FIFO memories of 1024 x 16 bits.

Assertions check three bus rules:

* No read of an empty FIFO.
* No byte written to SiTCP in a cycle after SiTCP was not ready.
* No RBCP read and write in the same cycle.

## Simulation

Each module has a self-checking testbench in `tb/`. Each ends with the line
`TB_RESULT checks=N failures=M` and has a cycle watchdog. To build and run a
testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/soi_daq_pkg.sv tb/tb_seabas_full.sv --top-module tb_seabas_full
./obj_dir/Vtb_seabas_full
```

| testbench | what it checks |
|---|---|
| `tb_readout_sequencer` | every output, every cycle, against the arithmetic timeline of several set-ups; INTEG = 0; STOP during a scan and during integration |
| `tb_adc_capture` | random codes, random strobes and channel counts; word format and write enables |
| `tb_channel_fifo` | random traffic against a queue model; flags, level, overflow pulse, dropped words |
| `tb_tcp_tx_merger` | random back-pressure and connection loss; byte order, channel order, one byte per clock when free |
| `tb_rbcp_regs` | reset values, big-endian byte lanes, read-back, clamps, control pulses, counters |
| `tb_seabas_user_fpga` | whole path at 4 channels and 16-word FIFOs, driven only through RBCP (see below) |
| `tb_seabas_full` | whole path at default size, one complete INTPIX4 frame from reset, then one INTPIX5 frame programmed over RBCP, with 10 % random back-pressure |

`tb_seabas_user_fpga` checks every received word against the ADC code
sampled for it. It also makes each of these happen and counts it:

* a two-frame run with the exact period;
* back-pressure stalls;
* a change of channel count and geometry between runs;
* FIFO overflow with the connection closed, where the dropped words must
  equal DROPCNT;
* CLEAR;
* STOP of an endless run.

`tb_seabas_full` checks these results:

* The INTPIX4 frame lasts 1 560 720 cycles and delivers all 425 984 words,
  with none dropped, at 546 Mbit/s average.
* The INTPIX5 frame lasts 5 087 520 cycles and delivers 1 261 568 words.

It runs in about 10 s.

## What is taken from the published description and what is not

The published description of the SEABAS2 DAQ system fixes these points:

* The chain: sensor blocks, then one 12-bit ADC per block (up to 16), then
  one FIFO per channel in the user FPGA, then SiTCP in a second FPGA.
* The 16-bit pixel word, with a 4-bit readout channel ID above the 12-bit
  code.
* The sensor geometry of INTPIX4 and INTPIX5.
* The 320 ns pixel period, the 2 ms (INTPIX4) and 4 ms (INTPIX5)
  integration times, and the 80 Hz / 545 Mbit/s INTPIX4 target.

The following choices are this design's own:

* **Clock.** A single 125 MHz clock. No FPGA clock is stated. 125 MHz makes
  320 ns a whole number of cycles, and makes one byte per cycle equal the
  Gigabit Ethernet rate.
* **ADC clocking.** The board ADCs are 65 MSPS parts and would normally run
  in their own clock domain. Here their outputs are treated as synchronous
  to the FPGA clock, and one sample per pixel is taken at the end of the
  pixel period.
* **A number that does not fit.** The quoted ADC-side limit for INTPIX4
  ("over 1.5 kHz, 655.36 us per frame") is 32 768 pixels x 20 ns, which is a
  50 MHz rate, not 65 MHz. It does not constrain this design.
* **FIFO style.** FIFO depth, show-ahead reads, and dropping new words when
  full.
* **Word order.** The channel order of the merged stream and the
  big-endian byte order.
* **Register map.** The whole RBCP register map, and the rules for START,
  STOP and CLEAR. The source only says that the PC and board talk over
  TCP/UDP, and that integration time differs between sensors.
* **SiTCP interface.** The SiTCP port names and their handshake
  (`TCP_OPEN_ACK`, `TCP_TX_FULL`, `TCP_TX_WR`, `TCP_TX_DATA`, `RBCP_*`).
  These follow the usual SiTCP library interface.
* **Who drives the sensor.** The sequencer's sensor outputs. The source does
  not say which part of the board drives the sensor's scan. This design
  places that timing in the user FPGA.

These parts are not included:

* SiTCP itself, the Gigabit Ethernet PHY, the ADC and DAC chips, and the
  sensor. They are represented only by ports.
* Everything on the PC side:
  * the multithreaded DAQ software with its software FIFO between data
    taking and storage;
  * the command-based framework;
  * the control of the sample stage, scaler and ionization chamber;
  * the summing of 500 exposures into one CT projection image.

A 3D CT scan as published (181 images of 500 frames each) is therefore a
sequence of runs with NFRAMES = 500, started by the PC. At the default
timing, one INTPIX4 image needs 500 x 12.486 ms = 6.2 s of readout.
