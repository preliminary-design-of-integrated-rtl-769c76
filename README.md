# Readout logic for an integrated PMT digitizer base

A photomultiplier tube (PMT) on a scintillator such as CLYC gives current pulses that
rise in a few nanoseconds and decay over several microseconds. The pulse area gives
the deposited energy. The ratio of slow to fast light tells neutrons from gamma rays
(pulse shape discrimination). The digitizer base puts the high-voltage supply, the
preamplifier, a 500 MSPS 12-bit ADC and a Zynq SoC into the PMT's base. One Ethernet
cable carries both power and data.

This RTL is the programmable-logic part of that readout. It takes the ADC's 13 DDR
LVDS lanes and rebuilds 500 MSPS samples from them. It keeps the last 8 µs of samples
in a ring buffer. When a sample crosses a threshold, it cuts out a record that starts
some samples before the crossing. Each record gets a header (event number, channel,
time) and goes into one of two 64 KB block RAMs, which take turns. When one BRAM is
full, it is locked for the processor's DMA engine, and writing goes on in the other.
Energy and pulse-shape analysis are not done here: the waveforms go to a host, which
does that work offline.

```
 ADC lanes     adc_iddr        fifo_1to2          header_stamp   ring_buffer
 13 x 500Mb/s ─► 1:2 DDR ─26─► 2:1 pack, ─52─► +12-bit ──64─► 1024 x 64, ──┐
 (250 MHz DDR)  (adc_clk)      adc_clk→clk      header          circular   │ port B
                                                   │                       ▼
                                       threshold_trigger ──trig/stop──► event_packager
                                       (same words as the ring)            │ 64-bit packages
                                                                           ▼
 config_regs ──► cfg to trigger/packager          pingpong_buffer: BRAM 0 | BRAM 1
      │         release pulses ───────────────►   (8192 x 64 each), full flags
      └─► 3 x spi_master (ADC, VCO, DAC)            read ports → DMA / processor
```

## Samples, words and clocks

The ADC sends one bit of every sample on each of 13 lanes. Lanes 11:0 carry the 12-bit
code (offset binary) and lane 12 carries the over-range bit. Each lane runs at 500 Mb/s,
DDR on a 250 MHz clock (`adc_clk`). Sample 2k is valid at a rising edge and sample 2k+1
at the following falling edge.

* `adc_iddr` captures both edges and shows the pair together on the next rising edge,
  as the FPGA's IDDR primitive does in its same-edge-pipelined mode. Its output is
  `{q_fall, q_rise}`, 26 bits, with the earlier sample in the low half.
* `fifo_1to2` packs two of these words into 52 bits (4 samples). The packed word then
  crosses into the 125 MHz global clock (`clk`) through a 16-deep asynchronous FIFO
  with Gray-coded pointers. The read side pops a word on every clock when the FIFO is
  not empty. This keeps up because 4 samples × 125 MHz is exactly 500 MSPS. A sticky
  `overflow` flag reports any loss.
* `header_stamp` counts words since reset (48 bits) and puts the low 12 bits in word
  bits 63:52. It also passes the full count (`word_time`) along for time stamps.

So every word that enters the ring buffer has this layout:

| bits  | 63:52        | 51:39    | 38:26    | 25:13    | 12:0               |
|-------|--------------|----------|----------|----------|--------------------|
| field | word count   | sample 3 | sample 2 | sample 1 | sample 0 (earliest)|

Each sample field is `{over-range, code[11:0]}`. Sample times are in 2 ns units:
4 × word count + sample index.

## Trigger and record window

Everything from here on runs on `clk`. The ring buffer writes one word per valid clock
at `wr_ptr` and then moves `wr_ptr` on, wrapping after 1024 words. `threshold_trigger`
sees each word in the same clock, along with the address the word is written to.

A sample is over threshold when its code is above `THRESH` (positive pulses) or below
it (negative pulses, the CTRL polarity bit). The trigger marks four points on the ring,
in this order:

```
   Begin ─── PRE_LEN words ───► Threshold_start ──► Threshold_stop ─── … ──► End
   (first word of record)       (first word with    (first word with        (Begin + REC_LEN - 1)
                                 a sample over)      no sample over)
```

* On a crossing, `trig_valid` pulses one clock after the Threshold_start word. It
  carries Begin, Threshold_start and the time of the first sample over threshold.
* `stop_valid` pulses once per record. It carries the time over threshold in words. If
  the pulse is still over threshold at End, it carries `stop_seen = 0` instead.
* The trigger arms again only after End has been written and the signal has dropped
  below threshold. Pulses inside a record are part of that record; they do not start
  a new one.
* A crossing is *missed* (counted, no record) in two cases. In the first, the packager
  is still sending the previous package; this lasts about PRE_LEN + 3 words after End.
  In the second, fewer than PRE_LEN words have been written since run was set, so the
  ring does not yet hold the pre-trigger samples.

The record is read from the ring *while it is still being written*. The packager reads
one word per clock, starting at Begin, and reads only addresses the writer has passed.
The writer also writes one word per clock, so the gap between them stays the same
through the whole record. As a result, a record can be much longer than the ring. A
20 µs record is 2500 words, and the ring holds only 1024. The only limit is that
PRE_LEN plus the three framing words must fit in the ring, so PRE_LEN is clamped to
1008.

## Data packages

`event_packager` checks the free space in the two BRAMs before it starts a package. If
the whole package (REC_LEN + 3 words) does not fit, the event is dropped and counted.
A package is therefore never cut short. The event number counts every trigger,
including dropped ones, so a gap in the numbers shows how many events were lost.

| word            | contents                                                      |
|-----------------|---------------------------------------------------------------|
| header 0        | `{8'hA5, channel[7:0], rec_len[15:0], event_no[31:0]}`        |
| header 1        | `{pre_len[15:0], start_time[47:0]}`; time of the first sample over threshold, in 2 ns units |
| REC_LEN words   | ring words Begin … End, unchanged (layout above)              |
| trailer         | `{8'hE5, 7'b0, stop_seen, time_over_threshold[15:0], event_no[31:0]}` |

The crossing sample sits at sample offset `start_time − 4·(start_time/4 − pre_len)`
from the first sample of the record. A host that sets the short and long integration
gates can take them from that point.

## Ping-pong BRAMs and the processor handshake

`pingpong_buffer` writes the package stream into BRAM 0, word after word. When BRAM 0's
last word (word 8191, 64 KB) is written, its `full` flag rises and BRAM 0 is locked:
nothing writes to it until the processor has copied it. Writing moves to address 0 of
BRAM 1, and so on back and forth. The processor reads a locked BRAM through its read
port (data one clock after `rd_en`). It then writes 1 to that BRAM's bit in the RELEASE
register, which unlocks it.

Points a user of this block must know:

* **Packages cross BRAM boundaries.** The stream simply continues from one BRAM into
  the other, so the host must join the 64 KB chunks in the order they filled. It can
  find the package boundaries from the `A5`/`E5` markers and the length field.
* **A BRAM only fills if the other one is free.** The packager never starts a package
  that does not fit in the free space of both BRAMs together. So while BRAM 0 is
  locked, BRAM 1 stops a few words short of full and events are dropped. BRAM 1 then
  reaches full only after BRAM 0 is released and the next package spills over into it.
  The processor must release each BRAM as soon as it has copied it, not wait for both
  BRAMs to be full.
* **No flush.** A half-filled BRAM is not handed over when events stop coming. At a
  low event rate the last events stay in the BRAM until it fills.
* An assertion in `digitizer_top` checks that no package word is ever written into a
  locked BRAM.

## Configuration

`config_regs` is a simple register file behind the processor's GPIO (write strobe and
4-bit address; reads are combinational).

| addr | name     | meaning                                                   |
|------|----------|-----------------------------------------------------------|
| 0    | CTRL     | bit 0 run (triggering on), bit 1 negative polarity        |
| 1    | THRESH   | threshold, 12-bit ADC code                                |
| 2    | PRE_LEN  | words before the crossing, clamped to 1008                |
| 3    | REC_LEN  | record length in words, 1 … 16381                         |
| 4    | CHANNEL  | channel number written into the packages                  |
| 5/6/7| SPI_ADC / SPI_VCO / SPI_DAC | 24-bit word sent to that device over SPI |
| 8    | RELEASE  | write 1 to bit b to unlock BRAM b                          |
| 9    | STATUS   | [1:0] full flags, [2] active BRAM, [3] ADC FIFO overflow, [6:4] SPI busy |
| 10–13| EVENTS, DROPPED, MISSED, OVERFLOW | counters                         |

A write to an SPI register queues the word. The word goes out as soon as that device's
`spi_master` is idle. The SPI masters work in mode 0, MSB first, write only, at
125 MHz / 8. `cs_n` rises half a bit period after the last bit, which also works as the
latch-enable pulse of the VCO. The DAC word sets the bias of the ADC's input driver.
Change REC_LEN, PRE_LEN, THRESH and the polarity only while run is 0. If run is cleared
during a pulse, the current record still ends properly, with `stop_seen = 0`.

## What comes from the published design and what is filled in

Taken from the published design: the 13-lane DDR input and the 1:2 IDDR stage; the 1:2
FIFO between the ADC clock and the 125 MHz global clock; the 52-to-64-bit header stage;
a 64-bit × 1k ring buffer on a true dual-port RAM; threshold triggering with the
Begin / Threshold_start / Threshold_stop / End marks; a data package holding event
time, channel and event number; two 64 KB BRAMs under ping-pong control with full
flags; SPI configuration of the ADC, VCO and DAC; and threshold, record length,
polarity and DAC setting as run parameters.

Chosen here, because the published description does not give them:

* the meaning of lane 12 (over-range) and the order of samples within a word;
* the header contents (a word count) and the package layout, including the trailer;
* the pre-trigger length as a setting, and the rules for re-arming and for missed
  events;
* reading the ring while it is written, which makes records longer than the ring
  possible;
* the room check before each package (whole events are dropped, never cut short) and
  packages crossing BRAM boundaries;
* the release handshake for a locked BRAM, and the register map;
* a single clock for the BRAM read ports. The original's AXI side may run at up to
  200 MHz, which would need dual-clock BRAMs.

Outside this RTL: the DMA engine and AXI BRAM controllers, the ARM processor and its
software, the Ethernet PHY, the ADC itself and all analog boards. Their connection
points are ports of `digitizer_top`. The LVDS input buffers, clock buffers and the PLL
are left to the FPGA tools. The published text also mentions a 1 GSPS 8-bit ADC from an
earlier version. This RTL follows the 500 MSPS 12-bit ADC of the board described.

## Sizes

| item                 | value                         |
|----------------------|-------------------------------|
| ring buffer          | 1024 × 64 bit (4096 samples, 8.2 µs) |
| ping-pong BRAMs      | 2 × 8192 × 64 bit (2 × 64 KB)  |
| CDC FIFO             | 16 × 52 bit                   |
| memory bits in total | 1,114,944 (about 34 BRAM36)   |
| flip-flops (coarse synthesis) | about 1,060          |

A 20 µs record (2503 words with framing) fills a third of a BRAM. Records of 12 µs and
20 µs, and the 100 ns / 1000 ns pulse-shape gates, all fit the default sizes.

## Testbenches

Each module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. Two testbenches run the
whole chain at its default sizes:

* `tb_digitizer_top` acts as both the ADC and the processor. The ADC side sends a
  stream of baseline noise and exponential pulses. The processor side sets up the
  registers and SPI devices, reads four 64 KB chunks and releases them. It holds back
  one release so that events are dropped, and it switches to negative pulses half way.
  The chunks are then parsed: every package (about 760) is compared sample by sample
  with what the ADC model sent. The test also checks that each mechanism occurred: both
  polarities, stop seen and not seen, missed and dropped events, each BRAM filling
  twice, and all three SPI transfers.
* `tb_long_record` records 20 µs and then 12 µs windows of pulses with the fitted CLYC
  decay shapes (gamma: four exponentials, 49 ns to 5.9 µs; neutron: three, 0.6 µs to
  6.2 µs). It checks the samples, then computes Q_L / (Q_S + Q_L) from the recorded
  waveforms and checks that neutrons and gammas separate.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/digitizer_pkg.sv tb/tb_digitizer_top.sv --top-module tb_digitizer_top
./obj_dir/Vtb_digitizer_top
```

Replace the testbench name to run another one. Each run takes a few seconds or less.
