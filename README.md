# HEEPidermis digital system in SystemVerilog

HEEPidermis is a small system-on-chip for recording the electrical impedance
of skin (bio-impedance, BioZ). It drives a programmable current into the
tissue and reads back the voltage this produces. From that voltage it derives
either the slow skin-conductance level (galvanic skin response, GSR) or the
amplitude and phase of the tissue impedance at a chosen frequency.

The chip pairs a microcontroller with a small analog front-end:

- two 8-bit current DACs (iDACs) that sink 0 to 10 uA in 40 nA steps;
- two ADCs built from voltage-controlled ring oscillators (VCO-ADCs);
- voltage and current references, and an analog multiplexer.

Three ideas carry the design.

1. **The ADC is a counter.** The input voltage sets the frequency of a ring
   oscillator. The number of oscillator edges in a sampling window is the
   sample. A longer window buys resolution, and little analog circuitry is
   needed.
2. **Waveforms come from memory.** A DMA channel streams samples from RAM to
   the iDACs at the pace of a hardware timer. This gives arbitrary current
   shapes without the CPU.
3. **The data side is event-based.** A second DMA channel moves every ADC
   sample through a level-crossing sub-sampler (dLC). The dLC drops samples
   that did not move by at least one step and packs the rest into 8-bit
   words. It can also raise an interrupt when the signal leaves a window, so
   the CPU sleeps until something happens.

This repository holds the digital part of that system as synthesizable RTL:

- the bus fabric and the two RAM banks;
- both DMA channels;
- the dLC;
- the controllers for every analog block;
- the oscillator counters and the VCO decoder;
- the decimator for an external Delta-Sigma modulator.

The RISC-V CPU, the debug/host interfaces and the standard microcontroller
peripherals are not included. Their bus ports and the interrupt lines are
ports of the top module, `heepidermis_top`. The analog blocks are outside too:
the top exposes their digital controls as ports. For simulation, `tb/` has
behavioural models of the iDAC and the VCO.

## Signal chain

```
          RAM_d (waveform table)                        RAM_d (event buffer)
               |                                              ^
          DMA_dac  <-- slot (timer tick)                 DMA_adc <-- slot (new sample)
               |                                          |    ^
               v                                          v    | 8-bit words
  iDAC ctrl: CURRENT --tick--> codes --> iDAC1/iDAC2     dLC --+--> irq (out of range)
                                          |    |          ^
                                  Z_skin  v    v  R_ref   | 32-bit sample
                                      VCOp      VCOn      |
                                        |tap0     |tap0   |
                                 26-bit counter  counter  |
                                        \Gray    /Gray    |
                                         VCO decoder -----+ (OUT register, notif)
```

In the impedance use case, iDAC1 sinks current through the skin and iDAC2
through a reference resistor. Each node feeds one VCO. The decoder works in
pseudo-differential mode, so each sample is the p count minus the n count.
Two runs with different phase offsets between the two sines let software
separate the tissue's amplitude and phase. The ADC is not synchronised with
the DAC, and the two runs work around that. Between runs the CPU only sets
the new phase offset (it rewrites the table) and restarts the two channels.

## Measuring voltage by counting edges

Each oscillator has 31 inverters. Tap 0 clocks a 26-bit counter
(`vco_counter`) that is never reset:

- a sample is always a difference of two readings, so the start value does
  not matter;
- a wrap is harmless as long as fewer than 2^26 edges fall between two
  readings. At the top frequency (887 kHz) that is 75 s.

The counter runs in the oscillator's clock domain and has to be read from the
system clock. It therefore keeps its value in Gray code, where one bit changes
per edge. The decoder puts every bit through two flip-flops and converts back
to binary. A synchroniser that catches a bit mid-change returns either the old
count or the new one, never a mix. `ovf_o` pulses when the count wraps (the
chip has a pad for it).

On each sampling event the decoder (`vco_decoder`) does three things:

1. subtracts the previous reading of each counter, modulo 2^26;
2. places p, n or p - n (MODE) into the 32-bit OUT register, sign-extended
   by the arithmetic;
3. pulses `notif`, which is the DMA request.

Sampling events come from an internal timer (every PERIOD cycles) or from a
CPU write to TRIGGER. OUT is valid one cycle after the event. The counters it
uses are the values from about three cycles earlier, because of the
synchroniser. That delay is the same for every sample, so it cancels in the
difference.

**Fine phase.** Counting whole periods gives at most f x T levels per sample,
for example 44,350 at 887 kHz over 50 ms (15.4 bits). The ring itself holds
more. In a ring with an odd number of inverters, exactly one pair of
neighbouring taps has equal values, and that pair marks where the edge is
travelling. The decoder captures the 31 taps at every sample (FINE_P, FINE_N)
and decodes a phase from 0 to 61 (PHASE_P, PHASE_N):

- the phase is the index of the next tap to switch, that is, the tap just
  after the equal pair;
- 31 is added when the last tap is high;
- it advances by one per inverter delay, 62 steps per period;
- it is 0 just before tap 0 rises, which is the edge that advances the
  counter.

A finer sample is `count_difference * 62 + phase_difference`. For the
impedance case that is about 21 bits, and 26 + 6 bits fit in a 32-bit word.

This decode assumes tap i+1 is driven by tap i. That ordering belongs to the
physical layout and must be checked against the real ring before the phase is
trusted. Forming the combined word is left to software. The DMA path carries
only OUT.

## Current injection

`idac_ctrl` drives both iDACs from one 16-bit CURRENT register. Bits 7:0 go
to iDAC1 and bits 15:8 to iDAC2, and the two always change in the same cycle.
There are two modes:

- **On demand** (`CTRL.timer_en = 0`). A write to CURRENT reaches the codes
  in the next cycle. Use it for DC levels and stimulation pulses.
- **Periodic** (`CTRL.timer_en = 1`). A write to CURRENT only stages the
  value. Every PERIOD cycles a tick copies the staged value to the codes and
  pulses both `refresh` and the DMA slot `ext_dma_slot_tx[1]`.

In periodic mode, DMA_dac answers each tick by writing the next table entry
into CURRENT, and the following tick applies it. A table entry therefore
appears one tick after the slot that fetched it. The first tick after the
timer starts applies whatever was staged before.

A 16-bit half-word table entry `{code2, code1}` holds one point of both
waveforms. A quadrature pair, for example, is `code1 = 128 + A sin(2 pi k/N)`
and `code2 = 128 + A cos(2 pi k/N)`. Each element costs DMA_dac 5 clock
cycles, so the update rate is at most f_clk/5. Reaching the chip's 200 kHz
limit takes a clock of at least 1 MHz, and 10 points per period of a 200 kHz
sine take a clock of at least 10 MHz.

## Level-crossing sub-sampler (dLC)

The dLC keeps a level L on a grid of step D = 2^LOG_DELTA. For each sample x
the DMA hands it:

- **First sample after enabling.** It only sets L.
- **|x - L| < D.** The sample is discarded.
- **Otherwise.** The dLC emits one byte `{dir, n}` and moves L by n steps
  towards x. Here `dir` = 1 for upward and n = floor(|x - L| / D), saturating
  at 127. L stays on the grid relative to its start, so small changes add up
  and are not lost.

Separately, every sample is compared with LOW and HIGH. With
`CTRL.range_irq_en` set, a sample outside that window raises the interrupt.
This is how the GSR mode wakes the CPU to re-bias the current. With
`CTRL.xing_irq_en` set, every emitted word raises the interrupt as well. The
interrupt stays high until software writes 1 to STATUS. The pads DLC_DIR and
DLC_REQ show the last direction and a pulse per emitted word.

The dLC sits inside DMA_adc's data path. With `MODE.dlc_en` set, each word
read from the source goes to the dLC first, and only an emitted byte is
written, as a byte, to the destination. SIZE counts *writes*. The channel
therefore interrupts after a fixed number of dLC words, however many samples
that takes.

## DMA channels

Each channel copies SIZE elements from SRC to DST. Both pointers advance by
their own increment, so a fixed register address uses increment 0. The
element size is a word, a half-word or a byte. A non-zero write to SIZE
starts the channel.

With `MODE.slot_en` set, every element waits for a pulse on the channel's
slot input:

- DMA_dac listens to the iDAC timer tick;
- DMA_adc listens to the VCO decoder's `notif` ORed with the Delta-Sigma
  decimator's `data_ready`.

One slot can be pending. A second slot arriving before the first is used sets
`STATUS.overrun`, and that slot is lost. When the last write completes, the
channel sets `STATUS.done`, and with `MODE.irq_en` raises its interrupt.

Each channel has separate read and write ports on the crossbar, one access
outstanding on each. An element takes about 5 cycles, 6 through the dLC. The
channels do no bursts and have no circular mode. A new run is started by
software after the interrupt.

## Buses and memory map

The system bus is a fully connected OBI crossbar (`obi_xbar`). OBI is the
request/grant plus response bus of the microcontroller platform.

- **Masters (7):** CPU instruction, CPU data, debug/host, DMA_adc read,
  DMA_adc write, DMA_dac read, DMA_dac write.
- **Slaves (5):** RAM_i, RAM_d, the always-on bus, the peripheral bus, the
  external peripheral bus.

Masters that want different slaves proceed in the same cycle. For the same
slave, the lowest master index wins and the others wait with `req` held.
Every slave in this design grants at once and answers exactly one cycle after
the grant. That rule lets the crossbar route the answer with a one-entry
owner register per slave, and assertions check it.

| Address | Slave |
|---|---|
| `0x0000_0000` | RAM_i, 16 KiB (`sram_bank`, 4096 x 32 bit, byte enables) |
| `0x0000_4000` | RAM_d, 16 KiB |
| `0x2000_0000` | always-on bus: +0x000 DMA_adc registers, +0x100 DMA_dac registers; the rest of the window goes out on `ao_ext_*` |
| `0x3008_0000` | external peripheral bus, 256-byte windows: +0x000 iDAC ctrl, +0x100 VCO decoder, +0x200 dLC, +0x300 Refs ctrl, +0x400 aMUX ctrl, +0x500 DSM decimation; unused windows read 0 |
| other | peripheral bus, out on `periph_*` |

Interrupts: `irq_o[0]` dLC, `irq_o[1]` DMA_adc done, `irq_o[2]` DMA_dac done.

## Register maps

All registers are 32 bits wide at byte offsets. Reads return data one cycle
after the grant.

| Block | Offset | Register |
|---|---|---|
| iDAC ctrl | 0x00 | CTRL {timer_en[2], en2[1], en1[0]} |
| | 0x04 / 0x08 | CAL1 / CAL2 (8-bit reference-branch trim, reset 0x80) |
| | 0x0C | CURRENT {code2[15:8], code1[7:0]} |
| | 0x10 | PERIOD (cycles between ticks) |
| | 0x14 | CODES (read-only, codes now driven) |
| VCO decoder | 0x00 | CTRL {timer_en[4], mode[3:2] (0 p, 1 n, 2/3 p-n), en_n[1], en_p[0]} |
| | 0x04 / 0x08 | PERIOD / TRIGGER (write) |
| | 0x0C | OUT (signed sample); reading clears STATUS |
| | 0x10 | STATUS {new[0]} |
| | 0x14 / 0x18 | COUNT_P / COUNT_N (binary, live) |
| | 0x1C / 0x20 | FINE_P / FINE_N (31 taps at the last sample) |
| | 0x24 / 0x28 | PHASE_P / PHASE_N (0..61 at the last sample) |
| dLC | 0x00 | CTRL {xing_irq_en[2], range_irq_en[1], en[0]}; a write restarts from the next sample |
| | 0x04 | LOG_DELTA (0..30) |
| | 0x08 / 0x0C | LOW / HIGH (signed) |
| | 0x10 / 0x14 / 0x18 | LEVEL / STATUS {irq[0]} (write 1 to clear) / EVENTS |
| Refs ctrl | 0x00 / 0x04 / 0x08 | IREF1 / IREF2 / VREF trim (8 bit, reset 0x80) |
| aMUX ctrl | 0x00 / 0x04 | CTRL {en[0]} / SEL (4 bit); `refresh` pulses when either changes |
| DSM | 0x00 | CTRL {en[0]} (enabling clears the filter) |
| | 0x04 | DECIM (R, 2..1024) |
| | 0x08 | OUT |
| | 0x0C | STATUS {new[0]} |
| DMA (both) | 0x00 / 0x04 / 0x08 | SRC / DST / SIZE (start) |
| | 0x0C / 0x10 | SRC_INC / DST_INC (bytes) |
| | 0x14 | MODE {irq_en[4], dlc_en[3], slot_en[2], dtype[1:0]: 0 word, 1 half, 2 byte} |
| | 0x18 | STATUS {overrun[2], done[1], busy[0]} (write 1 to clear) |
| | 0x1C | COUNT |

## Delta-Sigma input

An external Delta-Sigma modulator can deliver a bit stream on DSM_CLK and
DSM_IN. Both pins are synchronised to the system clock, which must run faster
than twice DSM_CLK. Each rising DSM_CLK edge takes in one bit, and a
third-order CIC filter decimates the stream by R.

The filter uses 32-bit wrap-around integrators and combs. It is exact while
R^3 < 2^32. A constant input density d settles to d * R^3: all ones gives
512 at R = 8. Each output sets OUT and pulses `data_ready`, which shares
DMA_adc's slot with the VCO decoder. Only one of the two sources should be
running while DMA_adc uses slots.

## Two ways to run it

**Impedance (per step, what the end-to-end test does):**

1. Trim the references (Refs ctrl) and the iDACs (CAL1/2).
2. Write the quadrature table into RAM_d.
3. Start DMA_dac: half-words, slot, SRC_INC 2, DST = CURRENT, DST_INC 0.
4. Start the iDAC timer.
5. Start the VCO decoder in p - n mode with its timer.
6. Enable the dLC with a step.
7. Start DMA_adc: SRC = OUT, SRC_INC 0, DST = buffer, DST_INC 1, dLC,
   slot, irq.
8. The CPU sleeps until the DMA_adc interrupt, then reads the 8-bit words,
   changes the phase offset and restarts both channels.

**GSR:**

1. Set iDAC1 on demand to a DC code.
2. Put the decoder in p-only mode.
3. Set the dLC's LOW/HIGH around the wanted operating point, with
   `range_irq_en`.
4. Let DMA_adc store what the dLC emits.
5. When the skin conductance drifts the sample out of the window, the dLC
   interrupt wakes the CPU, which writes a new CURRENT code and clears the
   interrupt.

## Verification

Each block has a self-checking testbench in `tb/`. Each one drives its block,
predicts the outputs independently, prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_obi_xbar` | 7 masters at random over 5 slave models; contention, back-pressure, every read against a shadow |
| `tb_obi_demux` | window decode, the local answer for unused windows, default-last routing |
| `tb_sram_bank` | every word of 16 KiB, byte enables |
| `tb_dma_channel` | plain copy under random bus stalls, slot pacing and overrun, the dLC path with SIZE counting writes |
| `tb_dlc` | thousands of random samples against an integer model, saturation, range and crossing interrupts |
| `tb_idac_ctrl` | both modes, tick spacing equal to PERIOD, slot pulses |
| `tb_vco_counter`, `tb_vco_decoder` | Gray sequence and wrap; differences in every mode across a counter wrap, the timer, on-demand trigger, fine-phase decode |
| `tb_refs_ctrl`, `tb_amux_ctrl` | register behaviour, byte enables, refresh rule |
| `tb_dsm_decimator` | CIC output against a direct convolution with the filter kernel |
| `tb_heepidermis_top` | the whole system with the analog loop closed (below), counters cut to 10 bits so they wrap |
| `tb_heepidermis_top_full` | the same sequence on the top at its default sizes (26-bit counters, 16 KiB banks) |

In the end-to-end test, the testbench plays the CPU and the host. The two
iDAC models sink current from a 0.8 V supply:

- iDAC1 through 20 kOhm, standing in for the skin;
- iDAC2 through 25 kOhm, the reference resistor.

The two node voltages drive the VCO models. Their frequency law runs
36 kHz at 408 mV to 887 kHz at 800 mV, quadratic in between; only the end
points are the chip's. The test then checks:

- every iDAC code and its timing;
- every ADC sample against the oscillator edges counted directly (within a
  few counts for the synchroniser delay);
- the order of the samples DMA_adc reads;
- the stored dLC words against a reference dLC;
- a second impedance run after the CPU changes the phase difference
  (90 to 45 degrees) and re-launches both channels;
- the GSR interrupt and re-bias;
- the CIC output, and DMA_adc storing each CIC result on its data-ready
  slot.

It counts 22 mechanisms (contention on the RAM bank, counter wrap, dLC
discards and events, each interrupt and so on), and one that never happens is
a failure.

To run one with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_heepidermis_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/heep_pkg.sv tb/tb_heepidermis_top.sv
./obj_dir/Vtb_heepidermis_top
```

The tests are written for a two-state simulator. Everything they read is
reset or initialised, and the testbenches give the reset a real falling edge.

## What it can hold

The paper's operating points, checked against the default sizes:

- **GSR at 280 nA and two samples per second.** The code is 7. At most
  443,500 edges fall in a sample, against 2^26. With the dLC the data bank
  holds many hours of events.
- **Impedance at 5.12 uA (code 128), 20 samples per second, 16-bit range.**
  Counts alone give 15.4 bits, and with the ring phase about 21 bits.
- **Sine injection up to the chip's 200 kHz update rate.** This needs a
  clock of at least 1 MHz (5 cycles per element).
- **Slowest rate in the chip's specification, 0.2 mHz.** This does *not* fit
  by plain differentiation: more than 2^26 edges fall between samples.
  Software would have to count the counter-overflow pulses.

## Where this RTL departs from the chip, and what is missing

- **Not included:** the CPU (a CV32E20 RISC-V core), the JTAG/SPI host
  interfaces, the SPI for external ADCs and flash, the timers and other
  standard peripherals, and all analog macros (LDO, vREF, iREF, iDACs, VCOs,
  aMUX, pads). Their digital sides are ports.
- **The second Delta-Sigma filter (SES)** of the chip is only named in its
  documentation and is not built. Only the CIC path is here.
- **The VCO "refresh" and "limited counter"** lines of the chip's block
  diagram have no described function and are not built.
- **Chosen here, not taken from the chip:**
  - the register maps, memory map and bus timing;
  - fixed-priority arbitration;
  - OR-ing of the two ADC-side slot sources;
  - the dLC word format {dir, n} on a power-of-two grid;
  - the calibration code widths and their reset values;
  - the ring-phase decoding rule;
  - the DMA channel's structure (no bursts, one pending slot).
- **The DMA_dac path has no sub-sampler.** Its dLC port is looped back, so
  every element it reads is written.
