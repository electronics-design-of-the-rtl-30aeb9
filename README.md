# Readout logic for the IceCube-Gen2 optical module prototype

A Gen2 optical module holds 16 or 18 small (4-inch) photomultiplier tubes (PMTs)
in one pressure vessel. Each PMT has its own base board, the *wuBase*. The wuBase
digitises its PMT in two gain channels (12 bits each, 60 MSps) and keeps the hits
until the module's main controller, the *mini-mainboard* (MMB), collects them.
The string cable cannot carry every hit to the surface. So hits are kept in the
ice, first in the wuBases and then in the MMB's flash "hitspool". A per-PMT alert
line also goes to a coincidence FPGA. That FPGA flags hits that several PMTs see
at once, because such hits are more likely to come from a particle than from PMT
noise.

This repository is synthesizable SystemVerilog for the digital logic of that chain:

* the wuBase FPGA: hit finding, timestamping, a two-page hit buffer, and the SPI
  port its microcontroller reads,
* the multi-PMT coincidence logic on fanout board A,
* the UART multiplexers of the two fanout boards, which let the MMB talk to one
  wuBase at a time,
* a top level, `gen2_dom`, that wires 18 wuBase FPGAs, both multiplexers and the
  coincidence logic together the way the module is cabled.

The architecture comes from the published description of the prototype. That
description says what each piece of logic does, not how it does it. So the
formats, sizes, protocols and timing here are this design's own choices. Each
choice is listed below, and again at the top of the source file that makes it.

## The module at a glance

```
            wuBase 0..8 (hemisphere A)                       fanout A                  MMB
 PMT -> ADC -> [wubase_fpga] --SPI--> wuBase MCU --UART--> [uart_mux A] <--UART--> STM32H7 MCU
                     |  trigger alert                                                 ^
                     +------------------------------> [multi_pmt_coinc] --coinc------+
                     ^  sync pulse, 20 MHz clock                 ^
            wuBase 9..17 (hemisphere B)                         |        fanout B
 PMT -> ADC -> [wubase_fpga] --SPI--> wuBase MCU --UART--> [uart_mux B] <--UART--> (MMB)
                     |  trigger alert ----------------------------+
```

The parts in brackets are RTL here. The rest stays outside `gen2_dom` and meets it
at its ports: PMTs, analog front ends and ADCs, the two kinds of microcontroller,
the MMB's communications module and power board, the microSD hitspool cards with
their select chip, the LED flashers, and clock and power distribution. In
particular:

* `adc[i]` carries the sample pair of PMT *i*, one pair per clock.
* `spi_*[i]` and `mcu_uart_*[i]` are the pins of wuBase MCU *i*.
* `mmb_*`, `uart_sel_*` and `coinc*` face the MMB.

The whole top runs on one clock, `clk`. It stands for the 60 MHz sample clock.
On the real boards each wuBase derives that clock from a distributed 20 MHz
clock; that multiplier is not modelled.

## wuBase FPGA (`wubase_fpga`)

The FPGA has three parts connected in a chain. It has no back-pressure anywhere:
the ADC never stops. So each record is either stored whole or dropped whole.

### Finding and recording hits (`wubase_hit_capture`)

A hit begins when the high-gain sample rises above `threshold`. The previous
sample must have been at or below the threshold, and no record may be in
progress. The block then emits one *record* of `REC_SAMPLES + 1` words:

| word | content |
|---|---|
| 0 (header) | `{1'b1, timestamp[30:0]}`: the local time of the triggering sample, in sample clocks |
| 1 .. REC_SAMPLES | `{8'h00, hg[11:0], lg[11:0]}`: both gains, starting `PRE_SAMPLES` samples before the trigger |

Exact timing, with t0 the clock in which the triggering sample is on `adc`:

* header on clock t0+1,
* sample word k on clock t0+2+k, holding the sample of clock t0−PRE_SAMPLES+k,
* `trigger_alert` high on clocks t0+1 … t0+ALERT_CYCLES,
* next possible trigger: clock t0+REC_SAMPLES+1 (the dead time is one record).

The timestamp counter counts every clock. A pulse on `sync_pulse` in clock *s*
makes clock *s*+1 read 0. That way the MMB can line up the clocks of all wuBases.
With the defaults, a record is 33 words and covers 533 ns of waveform, 67 ns of
it before the trigger.

### Two pages (`wubase_page_buffer`)

This is the part of the design with the most rules. The buffer has two pages of
`PAGE_WORDS` words. At any time one page is *filling* and the other is either
free or *closed*. A closed page waits for the MCU.

* **Closing.** A page closes on either of two events:
  * a record ends and another whole record might no longer fit,
  * the MCU asks for a flush and the page holds at least one record.

  A flush that arrives in the middle of a record waits for that record's last
  word. With the defaults a page closes after 31 records (1023 words).
* **Switching.** As soon as the filling page closes, writing moves to the other
  page, if that page is free. If it is not free, writing stays on the closed page
  and moves over when the MCU releases the other one.
* **Overflow.** Sometimes a header arrives while the filling page has no room and
  the other page is not free. The whole record is then dropped and `drop_count`
  goes up by one (it saturates at 65535). Partial records are never stored.
* **Order.** Pages close and are released in strict alternation, so the MCU
  always gets the older page first. `page_ready`, `ready_page` and `ready_count`
  describe that page.
* **Reading.** The read port is synchronous: `rd_data` is the word at the
  previous clock's `rd_addr`. Writing happens at full sample rate on one clock,
  reading happens on the same clock, and both use one dual-port array (2 ×
  `PAGE_WORDS` × 32 bits, 64 kbit at the defaults).

### SPI port to the MCU (`wubase_spi_readout`)

* **Electrical protocol.** SPI mode 0: SCLK idles low, both sides sample on the
  rising edge, and data changes on the falling edge. Bytes go MSB first.
* **Clocking.** The pins pass two-flop synchronisers and their edges are
  detected in the FPGA clock. This sets the only rate limit: **SCLK must be at
  most clk/8** (7.5 MHz at 60 MHz).
* **Commands.** The first byte after CS_N falls is a command. MISO is 0 while
  the command byte is shifted in.

| code | command | what follows |
|---|---|---|
| 0x01 | STATUS | 4 bytes out: `{page_ready, ready_page, ready_count[13:0], drop_count[15:0]}` |
| 0x02 | READ | the ready page, 4 bytes per word, MSB first, from word 0, for as long as CS_N stays low |
| 0x03 | RELEASE | frees the ready page |
| 0x04 | FLUSH | closes the filling page if it holds a record |
| 0x05 | SET_THR | 2 bytes in, big endian: the 12-bit threshold (reset value `THR_RESET` = 400) |

Other codes do nothing. A typical MCU loop is: STATUS; if `page_ready`, READ
`ready_count` words; then RELEASE. Reading one record costs 33 × 32 = 1,056 SCLK
periods, that is 8,448 FPGA clocks at the fastest SCLK. So one wuBase can hand
over about 7,100 records per second.

## Multi-PMT coincidence (`multi_pmt_coinc`)

All 18 alert lines arrive from other boards, so each passes a two-flop
synchroniser. A rising edge on a line opens a window of `WINDOW` clocks for that
PMT. A later edge on the same line restarts the window. While at least `MULT`
windows are open at the same time, the logic is *in coincidence*:

* `coinc` pulses for one clock when that state begins,
* `coinc_mask` records which PMTs had open windows at that moment,
* `coinc_count` increments.

More alerts inside an ongoing coincidence extend it; they do not count again.
Timing: an alert edge in clock e opens its window for clocks e+3 … e+2+WINDOW.
`coinc` appears one clock after the clock that first sees `MULT` open windows.
With the defaults (WINDOW = 6, MULT = 2), two PMTs coincide if their alerts start
at most 5 clocks (83 ns) apart.

## Fanout UART multiplexers (`uart_mux`)

Each fanout board connects the MMB's UART to one of its wuBases (ports 0..8 on
A, ports 9..17 on B in `gen2_dom`):

* `sel` names the port; any value ≥ `N_PORTS` means no port.
* The selected wuBase's receive line follows the MMB's transmit line, and its
  transmit line drives the MMB's receive line.
* Every other line is held at the UART idle level (high).
* A new `sel` takes effect only on a clock when both lines of the current link
  are high. So a switch never cuts a bit, though it can land between two
  characters. The MMB is expected to switch between messages. `sel_active`
  shows the port actually connected.

## Parameters

| parameter | default | from |
|---|---|---|
| ADC bits, channels, rate | 12, 2 (high/low gain), one pair per 60 MHz clock | the prototype description |
| `N_PMT` | 18 (16 also supported, with `N_A` = 8) | the prototype description |
| `N_A` (wuBases on fanout A) | 9 | chosen: even split by hemisphere |
| pages per wuBase | 2 | the prototype description |
| `PAGE_WORDS` | 1024 | chosen |
| `REC_SAMPLES`, `PRE_SAMPLES` | 32, 4 | chosen |
| `ALERT_CYCLES` | 4 | chosen |
| `THR_RESET` | 400 counts | chosen |
| `WINDOW`, `MULT` | 6 clocks, 2 PMTs | chosen |

## What is this design's own

The source describes these functions: ADC readout by a low-power FPGA, two
pages, SPI to the base MCU, a per-hit signal to a coincidence FPGA on fanout A,
a sync pulse and a 20 MHz clock from the fanouts, and UART multiplexing per
hemisphere. Everything about *how* these work is chosen here:

* the threshold discriminator on the high-gain channel and the fixed record
  length,
* the record word format and the 31-bit timestamp (it wraps after about 36 s),
* clearing the timestamp with the sync pulse,
* the page closing, flushing and drop rules, and the page size,
* SPI mode, command set and status word,
* coincidence window, multiplicity and outputs,
* the idle-gated UART switch,
* a single clock for all FPGAs.

The source places waveform compression on the wuBase MCU: it classifies hits as
single- or multi-photoelectron and keeps a charge and time for the simple ones.
That is software and is not here. The FPGA therefore keeps raw waveform
snippets. How the MMB stores and looks up hits in the hitspool (FAT files named
by timestamp) is also software.

## Rates and sizes

* **Sample rate.** Every block takes one sample pair per clock, so the
  digitiser rate of 60 MSps per PMT is met at a 60 MHz clock.
* **Sustained readout.** The SPI readout handles about 7,100 records/s per wuBase.
  That is well above typical PMT dark rates for tubes of this size, around
  1 kHz. `tb_wubase_sustained_readout` runs 5 kHz with no loss.
* **Module-level rates.** The module is expected to send about 500 kbit/s into
  the hitspool after compression. That rate and the microSD bandwidth are outside
  this logic. For reference, 500 kbit/s fills the 32 GB hitspool in about
  5.9 days.

## Simulation

All testbenches are self-checking. Each ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | block | what it shows |
|---|---|---|
| `tb_wubase_hit_capture` | hit capture | every output word and alert, cycle by cycle, against a model of the timing above; no retrigger inside a record |
| `tb_wubase_page_buffer` | page buffer | closing on full, flush, flush inside a record, overflow and drop count, release order, contents |
| `tb_wubase_spi_readout` | SPI port | all commands at SCLK = clk/8, status bytes, page streaming, pulses, threshold |
| `tb_wubase_fpga` | one wuBase | threshold change, flush, both pages full with 2 drops, records checked word by word, alert count |
| `tb_wubase_sustained_readout` | one wuBase, full size | 5 kHz hits with the MCU model reading and releasing pages; 3 pages, no drops, all words intact |
| `tb_multi_pmt_coinc` | coincidence | directed cases and random traffic on 18 lines against a model of the windows |
| `tb_uart_mux` | UART mux | per-clock routing under random traffic and selects, held-back switches, a decoded character |
| `tb_gen2_dom_16pmt` | 16-PMT variant (`N_PMT` = 16, `N_A` = 8) | last wuBase of each fanout wired: cross-fanout coincidence with the right mask, UART both ways on fanout B's last port |
| `tb_gen2_dom` | whole module, default parameters | every mechanism at least once (alerts, below-threshold pulse, full pages, flush, drops, release, coincidences across both fanouts, UART both ways on both fanouts, held-back switch), all read-back words compared |

`tb/spi_master_bfm.sv` is the MCU model used by the wuBase testbenches.

To run one testbench with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/gen2_pkg.sv tb/tb_gen2_dom.sv --top-module tb_gen2_dom -o sim
obj_dir/sim
```

The simulator has only two signal states, so every register that is read has a
reset or an initial value. `tb_gen2_dom` simulates about 600,000 clocks of the
full 18-wuBase design, which takes seconds.

To lint a module, for example the top:
`verilator --lint-only -Wall -Irtl -y rtl rtl/gen2_pkg.sv rtl/gen2_dom.sv`.

## Files

| file | contents |
|---|---|
| `rtl/gen2_pkg.sv` | sample and word types, record word builders, SPI command codes |
| `rtl/wubase_hit_capture.sv` | discriminator, timestamp, record builder, alert |
| `rtl/wubase_page_buffer.sv` | two-page hit buffer |
| `rtl/wubase_spi_readout.sv` | SPI slave and command decoder |
| `rtl/wubase_fpga.sv` | the three above, one wuBase FPGA |
| `rtl/multi_pmt_coinc.sv` | coincidence logic of fanout A |
| `rtl/uart_mux.sv` | fanout UART multiplexer |
| `rtl/gen2_dom.sv` | top level |
