# Time-over-threshold front end for a cosmic-ray air-shower telescope

An extensive air shower reaches the ground as a thin, nearly flat front of
particles moving at close to the speed of light. Several scintillation
detectors a few metres apart, each read by a photomultiplier tube (PMT), see
the front at slightly different times. The direction of the front follows from
those delays: for two detectors a distance `r` apart and a front tilted by
`θ` against their baseline, the delay is `t = r·sinθ / c`. So an error `δt`
in the timing becomes an angle error `δθ = c·δt / (r·cosθ)`.

This RTL is the FPGA logic of the front-end board that produces those times.
It does not digitise the PMT pulse with an ADC. Instead it measures
**time over threshold (ToT)**:

* Each PMT signal is compared with six threshold voltages at once.
* For every threshold, the logic records the instant the pulse rises above it
  and the instant it falls back below it.
* Plotting each threshold voltage against its two crossing times gives a
  coarse outline of the pulse. The 12 time stamps of one pulse also give its
  arrival time and its width at six heights.

All time stamps come from one 64-bit counter running at 500 MHz. The
resolution is therefore 2 ns, and every channel shares the same time base.

## Signal chain

```
             board                                FPGA (this RTL)
  PMT c ──> LVDS comparator ×6 ──cmp_in[c][5:0]──> pulse_capture ─┐  500 MHz domain
  DAC 1..6 ── V_th1..V_th6 ──┘                         ▲          │
                                                       │ count    ▼
                                         PLL ──clk_hs──> hstc   event_fifo (dual clock)
                                                       │          │
  GPS 1PPS ───────────────────────────────> pps_timer ─┘          ▼   50 MHz domain
                                                 │           pio_feeder ──32 bit──> microcontroller
  microcontroller ──16 bit──> dac_control ──serial──> DACs           ▲
  microcontroller ──capture_en / ovf_clear / flush──────────────────┘ (to every channel)
```

There are three channels (`NUM_CH`). Each channel has six thresholds
(`NUM_THR`), and one DAC sets each threshold for all channels. The design uses
two clock domains:

* the **50 MHz system clock**, which also runs the microcontroller;
* the **500 MHz clock**, made from it by a PLL.

Comparator sampling, the counter and record capture run at 500 MHz. Everything
the microcontroller touches runs at 50 MHz. The per-channel FIFO is the only
data path between the two domains.

The following parts sit outside this logic and connect through ports of the
top module `fedam_fpga`:

* the PLL;
* the LVDS input comparators, which are analog input buffers;
* the threshold DACs;
* the soft-core microcontroller with its UART.

## Capture records: the central idea

`pulse_capture` does not keep a pair of registers per threshold. It watches
the whole 6-bit comparator vector. Whenever the vector changes, it writes one
**record** to the FIFO:

```
record (70 bits) = { level[5:0] , ts[63:0] }
   level : comparator state just after the change (bit k = above threshold k)
   ts    : counter value latched when the change was seen
```

To recover the pulse, walk through a channel's records in order:

* the rise time of threshold `k` is the `ts` of the first record where
  `level[k]` goes from 0 to 1;
* its fall time is the `ts` of the record where `level[k]` goes back to 0;
* the time over threshold `k` is `2 ns × (fall − rise)`.

A clean pulse produces at most 12 records: six going up and six coming down.
If two thresholds are crossed in the same 2 ns tick, they share one record.
Because records follow changes of state, noise that makes a comparator flicker
simply produces more records, and nothing is lost while the FIFO has room.

**Latency.** The comparator bits are asynchronous, so they pass through a
two-flop synchroniser. The counter value stored in a record is the value two
ticks after the tick in which the comparator changed. This offset is the same
for every crossing and every channel. It cancels in widths and in
inter-detector delays. Only an absolute time needs the 2-tick correction, and
`pps_ts` has the same offset (see below).

**Synchroniser skew.** Each comparator bit is synchronised on its own. Two
thresholds crossed almost together can therefore land one tick apart and
appear as two records. Per-threshold decoding, as described above, is not
affected.

**Overflow.** If a change is seen while the FIFO is full, its record is
dropped and a sticky `overflow` flag is set. The flag stays set until the
microcontroller raises `ovf_clear`. A dropped record is never written late.

**Capture enable.** While `capture_en` is low, nothing is written. The
previous-state register keeps tracking the comparators, so turning capture
back on in the middle of a pulse does not invent a crossing.

## Getting records out: FIFO and PIO feeder

`event_fifo` is a dual-clock FIFO with 32 entries of 70 bits:

* the write side runs at 500 MHz and the read side at 50 MHz;
* the pointers are Gray-coded, and each side synchronises the other side's
  pointer with two flip-flops;
* full and empty are conservative, so a slot freed on one side is seen two or
  three clocks later on the other;
* reads are first-word-fall-through: the oldest record is visible on
  `rd_data` whenever `empty` is low.

32 entries hold more than two complete six-threshold pulses. With the FIFO
full, one more record can wait in the feeder's holding register.

**Flush.** A per-channel `flush` signal from the microcontroller empties the
channel's FIFO and drops the record that `pio_feeder` is holding:

* on the read side, the read pointer jumps to the synchronised copy of the
  write pointer;
* a record written in the last two or three 50 MHz cycles can still be on its
  way through the synchroniser, and it survives the flush;
* the write side sees the freed slots a few fast clocks later.

`capture_en`, `flush` and `ovf_clear` are the three control signals that go
from the microcontroller to the pulse capture, the FIFO and the feeder.

`pio_feeder` turns each record into three 32-bit words for the
microcontroller's parallel port:

| word | contents |
|------|----------|
| 0 | `{8'hA5, 18'b0, level[5:0]}`; the tag marks the start of a record |
| 1 | `ts[63:32]` |
| 2 | `ts[31:0]`; `pio_last` is high |

The port uses a valid/acknowledge handshake. While `pio_valid` is high, the
word on `pio_data` holds still. A one-cycle `pio_ack` takes the word, and the
next word appears on the following clock. After word 2, the next record is
popped immediately if the FIFO holds one. Acknowledged every cycle, the feeder
delivers one record every three 50 MHz cycles.

## Threshold DACs

`dac_control` takes a DAC number (`dac_sel`, 0–5) and a 16-bit word
(`dac_data`), started by a one-cycle `dac_wr`. It then performs a serial
transfer:

* it lowers that DAC's chip select;
* it shifts the word out MSB first, changing `dac_sdi` while `dac_sclk` is low
  (mode 0);
* it raises the chip select again.

`dac_sclk` is the 50 MHz clock divided by `2·SCLK_DIV`, which is 6.25 MHz by
default. `dac_busy` lasts `2 + 2·16·SCLK_DIV` cycles (130 by default), and a
request made while busy is ignored. The DAC part is not specified, so the
protocol is a generic SPI-style one. Adapt it for a different DAC.

## GPS time

`pps_timer` latches the counter on each rising edge of the GPS receiver's
one-pulse-per-second signal. It reports two values:

* `pps_ts`: the counter value at the edge, with the same 2-tick synchroniser
  offset as the capture records;
* `pps_period`: the number of ticks between the last two edges, which is about
  5·10⁸ for a 500 MHz clock.

The firmware converts a record's time stamp `T` to absolute time as:

```
GPS second + (T − pps_ts) / pps_period   seconds
```

This also calibrates the 500 MHz clock against GPS every second. The two
values reach the 50 MHz domain through a toggle handshake, and `pps_new`
pulses for one cycle when they change. `pps_period` reads 0 after the first
edge following reset.

## Clocks and reset

* `clk_sys`: 50 MHz. `clk_hs`: 500 MHz. The two clocks are treated as
  asynchronous.
* `rst` is active high and asserts asynchronously. It is released separately
  in each domain by `reset_sync`. Hold it for at least four `clk_sys` cycles.
  Both FIFO pointers reset together.
* `capture_en` and `ovf_clear` are level signals per channel. They are
  synchronised into the fast domain, so they take effect after two ticks.
  `flush` acts directly in the 50 MHz domain.
  `overflow` is synchronised back into the 50 MHz domain.
* The counter starts at 0 and would wrap after 2⁶⁴ ticks, which is about
  1170 years.

## Files

| file | contents |
|------|----------|
| `rtl/fedam_pkg.sv` | sizes (`NUM_CH`, `NUM_THR`, `TS_W`, `PIO_W`, `DAC_W`), record type, record tag |
| `rtl/fedam_fpga.sv` | top level |
| `rtl/hstc.sv` | 500 MHz 64-bit time counter |
| `rtl/pulse_capture.sv` | comparator synchroniser, change detection, record latch, overflow |
| `rtl/event_fifo.sv` | dual-clock Gray-pointer FIFO |
| `rtl/pio_feeder.sv` | record → three 32-bit words, valid/ack |
| `rtl/dac_control.sv` | serial DAC writer |
| `rtl/pps_timer.sv` | 1 PPS latch and period, hand-off to 50 MHz |
| `rtl/sync_2ff.sv`, `rtl/reset_sync.sv` | synchronisers |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/tb_fedam_fpga.sv` | end-to-end test at the default size |
| `tb/tb_resolution.sv` | time-resolution measurement at the default size |
| `tb/lvds_comparator_model.sv`, `tb/threshold_dac_model.sv` | behavioural models of the analog parts, for the testbenches |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog if it hangs. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_fedam_fpga -y rtl -y tb +libext+.sv -Irtl \
  rtl/fedam_pkg.sv tb/tb_fedam_fpga.sv
./obj_dir/Vtb_fedam_fpga
```

Replace `tb_fedam_fpga` with any other testbench name. The package must come
first on the command line. The rest is found through `-y`. Verilator is a
two-state simulator, so the testbenches give `rst` a rising edge at the start
to trigger the asynchronous reset.

**`tb_fedam_fpga`** runs the whole design with its default parameters. Its
input pulse is 2.6 V high, with a 20 ns leading edge, a 60 ns trailing edge and
a 58 ns width at half height. The pulse is generated as a piecewise-linear
voltage and passed through the comparator models. The thresholds are
0.24/0.50/1.00/1.50/2.00/2.41 V, programmed through `dac_control` into the DAC
models. The test checks:

* every time over threshold against its analytic value, to within 2.5 ns;
* random inter-detector delays of 0–40 ns, to within 2.5 ns;
* time after a (shortened) GPS second;
* that a disabled channel produces no records;
* an overflow: 36 records into a stalled channel leave exactly 33, the flag is
  raised and `ovf_clear` clears it;
* a flush: the flushed channel delivers nothing, while the other channels
  still deliver all 12 records of their pulse.

It counts each of these mechanisms and fails if any of them never happened.

**`tb_resolution`** sends 120 random-phase, random-width pulses into all
three channels and collects 2160 width errors:

* measured standard deviation: 0.81 ns;
* theory for two independent edges, each quantised to 2 ns (a triangular
  error on ±2 ns): 2/√6 = 0.82 ns;
* with the counter's LSB dropped (4 ns resolution): about 1.63 ns, as
  predicted.

## How far this follows the original design

Taken from the original board design:

* the overall architecture: a 500 MHz counter from a PLL on a 50 MHz system
  clock, shared by all channels;
* per channel, comparators → pulse capture → FIFO → PIO feeder → a
  microcontroller;
* a FIFO on the clock-domain boundary;
* six DAC thresholds set by software through a custom serial controller;
* latching the counter on both upward and downward threshold crossings;
* counting fast-clock ticks between GPS 1 PPS edges for absolute time;
* the bus widths: 6 comparator bits, a 64-bit counter, 32-bit PIO words,
  16-bit DAC commands;
* three PMT channels.

This design's own choices, because the original describes none of them:

* the change-of-state record format;
* the synchronisers and the 2-tick offset;
* FIFO depth and structure;
* the PIO word layout and handshake;
* the DAC protocol and clock rate;
* the overflow, capture-enable and flush controls;
* the PPS hand-off;
* all reset behaviour.

Known differences and open points:

* **Channel count.** A board-level drawing of the original shows five PMT
  inputs and 30 comparator bits, while its FPGA architecture shows three PMTs.
  The default here is three. `NCH` on the top can be raised; nothing else
  depends on it.
* **"2 × 64".** The original labels the counter bus "2 × 64". Here a single
  64-bit counter is latched twice per threshold, once on the rise and once on
  the fall. The label may mean something else, such as two counters.
* **Resolution figure.** The original quotes 1.15 ns as the standard
  deviation of a width measured with a 2 ns clock. The triangular distribution
  it describes has a standard deviation of 2/√6 ≈ 0.82 ns, which is also what
  `tb_resolution` measures. 1.15 ns = 2/√3 would correspond to a uniform
  distribution 4 ns wide. With 0.82 ns, the angle error for detectors 10 m
  apart is about 0.025/cosθ rad rather than 0.035/cosθ.
* **Not included.** The microcontroller and its firmware, the UART link to the
  server, the PLL, the comparators and the DACs are not included. The
  original's figure of about 175 pulses per second is set by the UART. This
  logic can deliver about 16 million records per second to the
  microcontroller.
* **Timing closure.** At 500 MHz, the 64-bit increment and the 70-bit capture
  latch need a fast FPGA. The counter may have to be pipelined, for example
  with a carry-save or split counter; this was not evaluated.
