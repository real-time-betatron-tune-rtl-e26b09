# Real-time betatron tune correction from measured magnet currents

In a synchrotron, the quadrupole and bending magnets set the betatron tune:
how many transverse oscillations a particle makes per turn. If the magnet
power supplies ripple, the tune ripples too. For slow extraction the tune is
steered close to a resonance on purpose, so the ripple shows up directly as
an uneven extracted beam. The ripple cannot be predicted, because it follows
the AC mains. But every supply already measures its own current error,
dI = I_ref - I_out, for its regulation loop.

This firmware uses those measurements. It reads dI of the eight supplies that
dominate the tune (six bending-magnet strings and the two largest quadrupole
families) at 10 kHz. To first order the tune shift is linear in the current
errors, so the firmware predicts it as

    dnu = alpha_1*dI_1 + ... + alpha_8*dI_8

Here alpha_i are coefficients from the optics model of the ring, loaded by
software. The result is sent every sample to the regulator of a single
correction quadrupole. The firmware also records all measured currents and
the prediction for each accelerator cycle, and hands them to the on-chip
processor for on-line monitoring.

The RTL here is the FPGA-fabric part of the SoC FPGA on the master board
(Cyclone V SoC class). Some things are outside this RTL:

* the processor and its Linux program;
* the DDR3 controllers;
* the PLLs;
* the AD converter boards and the slave boards in the other buildings.

The top level shows them as ports.

## System around the firmware

```
 D1 building              D3 building                         D2 building (this firmware)
 BM3,BM4 -> AD,AD -> slave board --fibre--> slave board --fibre--> master board --> corrector
                        BM1,BM2 -> AD,AD --^                          ^  ^
                                                 BM5,BM6,QFN,QDN -> AD-AD-AD-AD (daisy chain)
```

Each AD board digitises eight analog monitor channels with an ADS8568
(16 bit). The boards are chained over fibre, and the master reads the whole
chain as one serial stream. This firmware reads the four boards of its own
building directly; their deviations are called dI1..dI4 here. The deviations
of the four supplies in the other buildings arrive over one fibre as
dI5..dI8. The slave boards' firmware is not part of this design.

## Data flow and clock domains

```
 160 MHz                80 MHz                                 20 MHz
 adc_controller --dI1..4--> sync_80mhz --dI1..8--> tune_conversion --Vref--> [FIFO] --> data_sender_corrector --> corrector
   |   |                     ^                       ^        |
   |   |     data_receiver --+ dI5..8                |        +--dnu--> [FIFO]x2 --+
   |   |        |                           internal_memory (alpha)               |
   |   +--------+-------------------> data_selector_dac --> data_sender_dac --> debug DAC (20 MHz)
   |            |                                                                  |
   +-[FIFO]x4   +-[FIFO]x2 ------------------------------------------------------+ |
                                                                  50 MHz          v v
                               data_selector_ddr3 --4 words--> write_ddr3 --> avalon_arbiter --> FPGA-side DDR3
                                                                    | done               ^
                                                                    v                    |
                                                              dma_controller --read------+
                                                                    +--write--> processor DDR3
                               control_regs, internal_memory <-- processor (Avalon slave port)
```

There are four clock domains. Each block runs in the same domain as in the
original firmware:

* 160 MHz: ADC read-out.
* 80 MHz: fibre receiver and tune arithmetic.
* 50 MHz: Avalon bus, recording and DMA.
* 20 MHz: corrector and DAC senders.

Two kinds of crossing are used:

* **Streams** go through `async_fifo`. It is a Gray-pointer dual-clock FIFO,
  16 deep, with first-word-fall-through reads. These streams are the monitor
  data into 50 MHz and Vref into 20 MHz.
* **Held words** cross with `cdc_handshake`. The word is held on the source
  side and a toggle is synchronised to the destination. This carries dI1..4
  into 80 MHz and all sources of the DAC selector into 20 MHz. It has no
  acknowledge, so it relies on the words being at least a few destination
  cycles apart. At 10 kHz they are thousands of cycles apart.

Control bits enter their domain through two-flop `bit_sync`s. The multi-bit
settings (selector codes, buffer addresses, sample limit) are read as static
values. Change them only while `run` is low.

## One sample, step by step

1. **Conversion and read-out** (`adc_controller`, 160 MHz). Every 16000
   cycles (10 kHz) Conversion Start pulses for 100 ns. The controller then
   waits 2 us, which covers the ADS8568's roughly 1.7 us conversion. Next it
   raises Chip Select and clocks in 4 x 8 x 16 = 512 bits at 20 MHz (clk/8).
   Each sclk period is low for its first half and high for its second, and
   the data are sampled at the rising edge. The stream starts with the MSB of
   channel 1 of the nearest board. Channel 1 is taken as I_out and channel 2
   as dI. About 27.6 us after Conversion Start, `valid` pulses with all four
   pairs.
2. **Remote values** (`data_receiver`, 80 MHz). Frames from the D3 board
   update the registers that hold {dI5,dI6} and {dI7,dI8}. A frame with bad
   parity or a bad stop bit is dropped and counted.
3. **Alignment** (`sync_80mhz`). Each local sample produces one set of all
   eight deviations in the 80 MHz domain, using the latest remote pair
   values. The remote values can therefore be up to one sample period old.
   The fibre adds only about 6 us, so this does not matter for ripple below
   a few hundred hertz.
4. **Conversion** (`tune_conversion`). One multiplier is used eight times.
   Coefficient i is read from the internal memory (one-cycle read latency)
   and its product is added one cycle later. The result is ready N_DI+2 = 10
   cycles after the set arrives; 8000 cycles are available.
5. **Correction** (`data_sender_corrector`, 20 MHz). Vref leaves through a
   FIFO and goes out as a 19-bit serial frame. From Conversion Start to the
   end of the corrector frame takes about 30 us.
6. **Monitoring.** The {Iout_i, dI_i} pairs, both remote pairs and dnu also
   go into FIFOs toward the 50 MHz recording side.

## Number formats of the conversion

This is the part to understand before loading coefficients:

* dI_i are the ADC's two's-complement codes (signed 16 bit).
* alpha_i are signed 18-bit integers. They sit in the low 18 bits of words
  0..7 of the internal memory. 18 bits is the natural input width of an FPGA
  multiplier.
* The sum is kept in 16 + 18 + 3 = 37 bits, so it cannot overflow.
* **dnu**, the recorded prediction, is the full sum saturated to 32 bits. It
  is in units of (ADC LSB x alpha LSB).
* **Vref**, the word sent to the corrector, is the sum shifted right by
  `VREF_SHIFT` = 15 (arithmetic shift) and saturated to 16 bits. In effect,
  alpha_i are Q15 gains from ADC codes to corrector reference codes. Fold the
  tune-to-corrector-current calibration into alpha_i.
* With the correction disabled (register bit 1), Vref is forced to 0 but
  dnu is still computed and recorded. This lets the prediction be compared
  with a direct tune measurement while the corrector is off.

Saturation keeps the sign: a large negative sum gives 0x8000 on Vref, not a
wrapped positive value.

## Recording a cycle and moving it to the processor

`data_selector_ddr3` drains the seven monitor FIFOs and keeps the latest word
of each one. Its four outputs carry the inputs named by the selection
register. The codes are:

| code | stream |
|---|---|
| 0-3 | {Iout_i, dI_i} of local board i+1 |
| 4 | {dI5, dI6} |
| 5 | {dI7, dI8} |
| 6 | dnu |
| 7 | zero |

`write_ddr3` treats each dnu word (from its own FIFO) as one sample and
writes a 5-word record:

```
 word 0..3 : the four selected streams      word 4 : dnu
```

The record goes to consecutive addresses in the FPGA-side DDR3, through
`avalon_arbiter`. The writer has fixed priority there, because it is the
real-time master. The local pairs always arrive before the dnu computed from
them, so a record holds the currents of the same sample as its dnu. The
remote pairs in a record are the latest values received.

Recording and hand-over work like this:

* A pulse on `cycle_start` (the accelerator's cycle trigger) opens a buffer.
* The buffer closes at the next `cycle_start`, when `max_samples` records
  have been written (default 52000 = 5.2 s at 10 kHz, the longest cycle),
  or when `run` drops.
* Two buffers, `buf_base0` and `buf_base1`, are used in turn. The next cycle
  can therefore be recorded while the last one is being copied.
* When a buffer closes, `dma_controller` copies it word by word to
  `hps_base` in the processor's DDR3.
* When the copy is done it raises `irq_cycle_moved` and increments the cycle
  counter. The word count is kept in `REG_LAST_LEN`.
* If a buffer closes while a copy is still running, that copy request is
  refused and counted as an overrun. With real cycles of seconds this does
  not happen. The software must read `hps_base` before the next cycle
  finishes.
* dnu words that arrive outside a recording are dropped.

One word is copied at a time, so each word costs a read, the memory's read
latency and a write: roughly 10 cycles of 50 MHz. A full 5.2 s buffer holds
260000 words, which takes about 50 ms to copy. That is far less than the
shortest cycle (2.48 s), so one buffer is always free. A burst DMA would be
faster but is not needed at this rate.

## Programming model

The processor's Avalon slave port (`cpu_*`, 50 MHz, word addresses) works
like this:

* Reads return one cycle later with `cpu_readdatavalid`.
* Writes take no wait states.
* Words 0..15 are the registers below.
* Words 256..511 are the internal memory; the coefficients are at 256..263.

| word | name | contents |
|---|---|---|
| 0 | CTRL | bit 0 run, bit 1 correction enable |
| 1 | DAC_SEL | 4 x 4-bit source code, channel 0 in bits 3:0. Codes: 0-3 Iout1-4, 4-11 dI1-8, 12 Vref, others 0. Reset: Vref, dI1, dI5, Iout1 |
| 2 | DDR_SEL | 4 x 3-bit code (table above), reset 0,1,2,3 |
| 3, 4 | BUF_BASE0/1 | byte addresses of the two recording buffers (reset 0, 16 MB) |
| 5 | HPS_BASE | byte address of the copy in the processor's DDR3 (reset 0x2000_0000) |
| 6 | MAX_SAMP | records per buffer (reset 52000) |
| 7 | STATUS | bit 0 DMA busy; 15:8 fibre frame errors; 23:16 DMA overruns (saturating) |
| 8 | CYCLES | cycles copied |
| 9 | LAST_LEN | words in the last copy |

To start:

1. Write alpha_1..8 to words 256..263.
2. Set the buffers and `MAX_SAMP`.
3. Write CTRL = 1 to run with the correction off, or CTRL = 3 to run with
   it on.
4. After each `irq_cycle_moved`, read `LAST_LEN` words from `HPS_BASE`.

## Line formats chosen here

The original system defines the physical links, but not in a form that can
be copied. These formats are this design's own, chosen to be simple:

* **Fibre from D3** (`link_rxd`). Idle high, start bit 0, 64 data bits MSB
  first (dI5, dI6, dI7, dI8), even parity, stop bit 1, 10 Mb/s (8 cycles of
  80 MHz per bit). One frame per sample.
* **Corrector** (`corr_txd`). Idle high, start bit 0, Vref MSB first, even
  parity, stop bit 1, one bit per 20 MHz cycle.
* **Debug DAC.** 16-bit, 4 channels, updated at 100 kHz as on the original
  board. The DAC part is not known, so a generic SPI frame is used:
  `{channel[1:0], 6'b0, data[15:0]}`, sclk = 10 MHz, active-low sync. The
  four frames fill the 200-cycle update period exactly.
* **AD chain.** Conversion Start, Clock (20 MHz), Chip Select and Data Out
  are as on the original board. The active-high polarity of Chip Select and
  the sampling edge are assumptions.

## What follows the original and what does not

These parts follow the original design:

* the block structure and clock domains of the FPGA firmware;
* the eight-term linear conversion with coefficients in on-chip memory;
* 10 kHz sampling, the 16-bit and 8-channel AD boards, the 20 MHz MSB-first
  daisy-chain read-out and the about 1.7 us conversion time;
* four local boards and four remote deviations;
* recording one accelerator cycle (2.48-5.2 s) in the FPGA-side DDR3 and
  copying it by DMA over Avalon to the processor's DDR3;
* start/stop and parameter access from the processor's program;
* a 4-channel, 16-bit, 100 kHz debug DAC.

These are this design's own choices:

* all bit-level formats and line protocols;
* the coefficient and Vref scaling;
* the correction-enable behaviour;
* the internal inside of every block: serial MAC, handshake synchronisers,
  latest-value selectors, ping-pong buffers with an external cycle trigger,
  the one-word DMA, fixed-priority arbitration;
* FIFO depths and the register map.

The original block diagram shows a "Vref" label next to the inputs of the
DAC data selector, but the drawn arrows there are ambiguous. Vref is offered
as a DAC source.

Not built:

* the slave boards' firmware;
* the Ethernet, SD card and flash paths;
* the vendor DDR3 controllers and PLLs.

The DMA here is a minimal engine, not the vendor's.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
one prints `TB_RESULT checks=N failures=M`. Behavioural models used by the
testbenches:

* `ad_chain_model` models the daisy-chained ADS8568 boards, including a
  check that no read starts before the 1.7 us conversion has finished.
* `avalon_mem_model` models a DDR3 behind an Avalon slave, with random
  waitrequest and fixed read latency.
* `spi_dac_model` models the debug DAC.

`tb_tune_correction_top` runs the whole firmware at its default sizes and
rates for about 2 ms of simulated time. It checks:

* every corrector frame against the sum computed in the testbench from the
  AD model's codes and the fibre frames;
* the records copied to the processor memory, sample by sample;
* the DAC outputs and the status registers.

It also counts each mechanism and fails if one never happens:

* correction off and on;
* a corrupted fibre frame;
* a buffer closed by `max_samples`;
* a buffer closed by a trigger;
* DMA transfers;
* a refused DMA start;
* DDR3 waitrequest stalls.

It takes a few seconds in Verilator.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl -Itb --top-module tb_tune_correction_top \
  rtl/tune_pkg.sv tb/tb_tune_correction_top.sv
./obj_dir/Vtb_tune_correction_top
```

Limits of this verification:

* Clock-domain crossings were simulated with unrelated clock periods, not
  with random phase jitter.
* The timing of the real AD boards, the corrector regulator and the DAC
  rests on the assumptions above.
* The design has not been run on hardware or against the original
  firmware's bit formats.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| adc_controller | N_BOARDS, N_CH, BITS | 4, 8, 16 | chain shape |
| | SAMPLE_DIV | 16000 | 10 kHz at 160 MHz |
| | SCLK_DIV | 8 | 20 MHz data clock |
| | CONV_PULSE, CONV_WAIT | 16, 320 | 100 ns pulse, 2 us wait |
| data_receiver | OVERSAMPLE | 8 | clocks per fibre bit |
| tune_conversion | VREF_SHIFT | 15 | fraction bits of alpha for Vref |
| data_sender_dac | UPDATE_DIV | 200 | 100 kHz at 20 MHz |
| async_fifo | WIDTH, DEPTH | 32, 16 | |
| internal_memory | DEPTH, WIDTH | 256, 32 | |

Shared constants (eight deviations, four local boards, 16-bit samples,
18-bit coefficients, the bus structs and the register map) are in
`rtl/tune_pkg.sv`.
