# Trigger and memory logic for a 14-bit, 120 MHz surface-detector front end

A water-Cherenkov station of a cosmic-ray surface array watches its tank with
three photomultipliers (PMTs). Each PMT signal is split into a high-gain (HG)
and a low-gain (LG) channel. The legacy electronics sampled the six channels
at 40 MHz with 10-bit ADCs and sent the station controller a fixed event of
768 time bins x 6 channels x 10 bits. The upgraded front-end board described
here samples the same six channels with 14-bit ADCs at 120 MHz (up to
250 MHz for tests), plus two 12-bit channels for other detectors. The two
gains overlap by 9 bits, which gives a 19-bit dynamic range.

The board still plugs into the old controller and still has to deliver the
old 768 x 60-bit event. So the logic has two jobs:

* trigger and buffer at the new resolution and rate, in buffers four times
  longer than the legacy window; and
* squeeze each event back into the legacy format without throwing away what
  the new ADCs see. It does this by packing the 14-bit values into 10-bit
  words, adding diagnostic words, and adding summed or extra transmissions
  when an event has signal outside the legacy window.

This repository gives synthesizable SystemVerilog for that trigger/memory
logic, and for the CPLD logic that reloads the FPGA's configuration. The
design follows the published description of the board (Z. Szadkowski, "Front-End
Board with Cyclone V as a Test High-Resolution Platform for the
Auger-Beyond-2015 Front End Electronics", 2014). Most of that description is
about the board and its FPGA selection. Where it names a function without
saying how it works, this RTL makes its own choices. Those choices are listed
below and in each file's header.

## Data path

```
 ADC chip 0..2 (2 x 14 b) --PLL clk--> adc_sync x3 --+--> sd_data (to an external DCT trigger)
 ADC chip 3   (2 x 12 b) --PLL clk--> adc_sync    ---+--> aux_data (to a processor's I/O buffers)
                                                      |
               HG1..3 -> thr_trigger --+              |
               HG1..3 -> tot_trigger --+-- OR --> trig
               dct_trig (external) ----+              |
                                                      v  (one-clock delay)
                                   trace_buffer: 2 x (1024 + 2048) bins x 84 b
                                                      |
                                   event_readout (+ window_check)
                                                      |  6 x 14 b bins, or sums of 2/4
                                   data_formatter     |  6 x 10 b legacy words
                                   diag_insert        |  words 760..767 replaced
                                   ub_dma_port  ------+--> 32-bit DMA bus to the controller

 CPLD clock:     ps_config_loader: 8 files in 128 MB memory -> Passive Serial pins of the FPGA
```

Everything from the synchronisers on runs on one sampling clock `clk`, with
one bin per clock. `feb_top` connects all the blocks. The settings
(thresholds, enables, formats) are plain input ports. On the board they would
sit in registers written by the controller; that register interface is not
described, so it is not built.

## Clock crossing from the ADCs

There are four dual-channel ADC chips. Each sends its own data clock into its
own PLL, and the PLL clock captures that chip's LVDS data. `adc_sync` passes
the samples through three registers on the PLL clock, then one register on
the global clock. The PLL clocks and the global clock all come from the same
reference and run at the same frequency. So this is a phase-alignment
pipeline, not an asynchronous crossing: it depends on the PLL phase settings
in the FPGA flow. LVDS deserialisation, on-chip termination and the PLLs
themselves are vendor primitives and are not in this RTL. Samples arrive as
parallel words.

## Triggers

* **Threshold (Thr)**, `thr_trigger`: fires on the first bin in which all
  three HG samples are above their thresholds. The nominal threshold is
  1.75 times the peak current of a vertical muon. That is a calibration
  value, so the threshold is an input in ADC counts. Only HG channels are
  used.
* **Time over threshold (ToT)**, `tot_trigger`: for signals spread in time.
  The source gives only its purpose, so this block uses the usual
  surface-detector rule: enough bins above a low threshold within a sliding
  window, in at least 2 of the 3 PMTs. The 40 MHz values (13 bins in 120)
  are scaled to 120 MHz: `OCC = 39` bins in `WIN = 360`. All three are
  parameters.
* **External (DCT) trigger**: the spectral trigger based on the discrete
  cosine transform is not part of this RTL. Its request enters on `dct_trig`,
  and the samples it needs leave on `sd_data`.

Both internal triggers answer one clock after the bin they judge. The bin
stream into the buffer is delayed by one clock to match, so the bin that
fired lands exactly at event index 1024. An external trigger must use the
same one-clock latency.

## Event buffers

`trace_buffer` holds two buffers of 3072 bins x 84 bits (516,096 bits in
total). Each buffer is a ring:

1. Samples are written continuously into the active ring.
2. A trigger is accepted once the ring holds at least 1024 samples; until
   then it is *unarmed*.
3. From the trigger bin on, 2048 bins are written (the trigger bin counts as
   the first of them). The ring is then frozen.
4. Writing moves to the other ring, which must collect 1024 new samples
   before it can accept a trigger.
5. If both rings are frozen, writing stops (`stalled`) until the readout
   releases one.

A trigger that comes while the active ring is unarmed or while writing is
stopped is lost and counted (`lost_cnt`). A trigger during the 2048-bin
post-trigger phase belongs to the event already being taken and is ignored.
At 160 MHz one buffer spans 19.2 us, which is the length of the legacy 768-bin trace at 40 MHz; at 120 MHz it spans 25.6 us. Events are read in the order they were taken. The read index is relative to
the event: index 1024 is the trigger bin, and the module maps the index onto
the ring.

## Fitting an event into the legacy format

This is the part of the design with the most rules.

### Which span is sent

The legacy trace is 768 bins: 256 before the trigger and 512 from it on. In
buffer indices that is 768..1535. When extended handling (`ext_en`) is on,
`event_readout` first scans all 3072 bins through `window_check`. A bin counts
as signal when any HG sample is above `chk_thr`. Signal outside 768..1535 is
split into two zones:

| zone   | buffer bins              | factor N |
|--------|--------------------------|----------|
| none   | -                        | 1        |
| near   | 512..767, 1536..2047     | 2        |
| far    | 0..511, 2048..3071       | 4        |

The span sent is `[1024 - 256*N, 1024 + 512*N)`: 768, 1536 or 3072 bins. This
keeps the 1:2 split around the trigger. With N = 4 it is the whole buffer.
The two zones, the significance test and this centring are this design's
choices; the source says only that the two outer regions are checked.

### How the span is sent (`xmode`)

* `XM_SUM`, lossy: one 768-word transmission. Each word is the sum of N
  neighbouring bins, clipped to 14 bits.
* `XM_EXTENDED`, lossless: N consecutive transmissions of 768 words each.
  This is the standard one plus 1 or 3 "extended" ones, and the receiving
  software has to know about it.

### From 14 to 10 bits (`data_formatter`)

* **HG words**: the 10 LSBs of the 14-bit value. Any value above 1023
  becomes 3FF, which tells the next trigger level that the HG channel has
  saturated.
* **LG words**, `LG_HGMSB`: `{LG[13:8], HG[13:10]}`. The HG word and the LG
  word together give the full 14-bit HG value, plus the top six LG bits for
  strong signals.
* **LG words**, `LG_SHIFTED`: the LG value shifted right by `lg_shift` (0..4)
  and saturated. This drops leading zeros when signals are small.
* `adc12` clears the two LSBs of every sample, to emulate cheaper 12-bit
  ADCs.

The source states the HG rule outright. For the first LG variant it says
"6 most significant (but non zero) bits". Here that is read as the fixed
field LG[13:8]: a floating field would need a position code that the source
does not give. For the second variant the source does not say how the shift
is chosen, so it is an input here.

### Diagnostic words (`diag_insert`)

In the legacy traces the last 8 bins hold only noise. In diagnostic mode
(`diag_en`), words 760..767 of every transmission carry information about the
event instead. The number and position of these words come from the source.
Their contents are this design's own, filled in by `feb_top`:

| word | ch0 | ch1 | ch2 | ch3 | ch4 | ch5 |
|------|-----|-----|-----|-----|-----|-----|
| 760 | event no. [9:0] | event no. [19:10] | {trig src[2:0] (dct,tot,thr), xmode, N code[1:0], transmission[1:0], lg_fmt, adc12} | lost triggers [9:0] | {lg_shift, ext_en} | 2A5 marker |
| 761 | timestamp [9:0] | [19:10] | [29:20] | [39:30] | 0 | 0 |
| 762 | Thr threshold PMT1..3 [9:0] | | | ToT threshold PMT1..3 [9:0] | | |
| 763 | check threshold PMT1..3 [9:0] | | | 0 | 0 | 0 |
| 764..767 | 0 | | | | | |

The timestamp counts sampling clocks since reset, up to the trigger bin.

## Reading events: `ub_dma_port`

The station controller reads by DMA on a 40 MHz bus with one wait state.
Each 60-bit bin goes out as two 32-bit reads:

* read 0: `{first_of_event, first_of_transmission, ch2, ch1, ch0}`
* read 1: `{last_of_event, last_of_transmission, ch5, ch4, ch3}`

The chip select and read strobe are asynchronous. They pass a two-flop
synchroniser, and the end of each read advances to the next half-word. The
next half-word appears on the bus within 4 sampling clocks (33 ns at
120 MHz). That fits in a bus cycle with a 50 ns strobe and at least 25 ns
between strobes. `ub_irq` is high while the first word of an event is
waiting. The split into two reads, the flag bits and the strobe protocol are
this design's choices; the source gives only the bus rate and wait state,
and that there are 32 data lines.

## Reconfiguration: `ps_config_loader`

A CPLD next to the FPGA keeps up to eight configuration files in a 128 MB
nonvolatile memory, in 16 MB slots (the largest file is about 12 MB). One
command carrying a slot number reloads the FPGA in Passive Serial mode:

1. nCONFIG is pulsed low.
2. The loader waits for nSTATUS to go high.
3. Bytes are shifted out least-significant bit first on DATA0. DCLK runs at
   half the CPLD clock, and data changes while DCLK is low.
4. After CONF_DONE, `INIT_CLKS` more DCLK cycles are given.

If nSTATUS falls during the load, or a whole slot goes out without CONF_DONE,
the load ends with `error`. The flash and SD-card protocols are not
described, so the memory is reached through a generic byte
request/acknowledge port. The sequence follows the FPGA vendor's usual
Passive Serial rules. The other configuration paths (JTAG, Active Serial from
an EPCQ device, the Serial Flash Loader) are board wiring and vendor logic.

## Parameters

| module | parameter | default | origin |
|--------|-----------|---------|--------|
| trace_buffer, window_check, event_readout | PRE / POST | 1024 / 2048 | source |
| window_check, event_readout | SPRE / SPOST | 256 / 512 | source (legacy trace) |
| diag_insert | TLEN / DW | 768 / 8 | source |
| adc_sync | W / CH / STAGES | 14 / 2 / 3 | source |
| tot_trigger | WIN / OCC / NFOLD | 360 / 39 / 2 | assumed (scaled standard ToT) |
| ps_config_loader | ADDR_W / SLOT_W | 27 / 3 | source (128 MB, 8 files) |
| ps_config_loader | NCFG_LOW / INIT_CLKS | 80 / 16 | assumed |

Shared widths and types are in `feb_pkg`: 14-bit samples, 6-channel bins,
10-bit legacy words, and the `lg_fmt_e` and `xfer_mode_e` enumerations. All
sizes are the source's own; nothing is scaled down. The synthesised design
holds 516,096 memory bits. The FPGA on the board (5CEFA9) has 12.2 Mbit.

## Departures from the source and things not covered

* The two 12-bit auxiliary channels are only synchronised and brought out
  (`aux_data`). How they are stored or sent is not described.
* The DCT trigger, the soft processor with its SDRAM, UARTs and two 16-bit
  I/O buffers, the ADCs, the analog front end, the PLLs and the LVDS
  receivers are not part of the RTL.
* The neural-network trigger is mentioned only as a future option.
* The ToT rule, the zone rule that picks N, the significance test, the
  diagnostic contents, the UB bus protocol, the channel order (chips 0..2
  carry HG1,HG2 / HG3,LG1 / LG2,LG3) and all reset behaviour are this
  design's choices.
* The original firmware was written in AHDL and kept its verified timing.
  This is a fresh SystemVerilog description of the functions, not a
  translation of that code.
* No timing closure has been attempted. Nothing here shows that the logic
  runs at 120, 160 or 250 MHz on the target device.

## Simulation

Every file in `rtl/` is one module or package, and `tb/` holds one
self-checking testbench per block. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_feb_top \
          -y rtl -y tb rtl/feb_pkg.sv tb/tb_feb_top.sv
./obj_dir/Vtb_feb_top
```

Replace `tb_feb_top` with any other testbench name to run that one instead.

`tb_feb_top` runs the whole design at its default sizes in a few seconds. It
generates the ADC waveforms, reads every event back over the DMA bus model
and compares every word with a reference built from the generated samples.
Its events are:

* a lost unarmed trigger;
* a saturating Thr event;
* a ToT event with far signal, sent as 4 extended transmissions;
* an external-trigger event with near signal, sent summed by 2, with shifted
  LG words in 12-bit mode;
* two events taken while the reader is paused, which fill both buffers and
  stall them, and a trigger lost during the stall;
* a configuration reload.

It fails if any of these mechanisms never happens. The block testbenches use
smaller buffers where that shortens the run, and check:

* cycle-exact trigger pulses against reference models;
* every bin read back from the buffers;
* the first-word latency of the readout;
* the DMA half-word latency;
* the Passive Serial bit order.
