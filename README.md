# A four-channel FPGA power spectrum engine

This engine watches four narrow (4-bit) input signals for interference.
For each signal it measures how the power is spread over frequency, and it
does this continuously, with no gaps. Every 256 samples of a channel become
one spectrum of 256 frequency points. Over 128 such blocks it keeps two
numbers for every point and channel:

- the mean power;
- the largest power seen, together with the block in which it was seen.

Raw input and results are written into two circular areas of an external
SDRAM. A host reads them from there while the engine keeps running.

The RTL is SystemVerilog (IEEE 1800-2017). It sits between four kinds of
external part, which are not included here:

- the LVDS receivers that deliver the samples;
- two vendor 256-point complex FFT cores;
- an SDRAM controller;
- a control FPGA that turns host accesses into a simple register bus.

The design follows a published architecture for a Virtex-class FPGA board.
That architecture has 4 channels of 4 bits, 256-point FFTs, 32-bit power
values, averages over 128 blocks, cycles of 128 averaging periods, 32-bit
timestamp and marker counters, a 66 MHz system clock and a target of
22 MHz per channel. Those numbers are the parameter defaults. Where the
source only names a block or says what it does, the structure here is this
design's own. These choices are listed in "Departures and own choices".

## Data flow

```
 lane_a (CH1/CH2) ─┐                      ┌─► input data buffer ─(128-bit words)──┐
 lane_b (CH3/CH4) ─┼► data_sampler ─► input_fifo                                    │
 strobe ───────────┘   (strobe clock)  (strobe → clk)                               │
                                          └─► 4 × channel_buffer (ping-pong)        ▼
                                               CH1+jCH2 ─► FFT core A ─┐       sdram_mux ─► SDRAM
                                               CH3+jCH4 ─► FFT core B ─┤           ▲
                                                                       ▼           │
                                              chsep_power (separation, |X|²)      │
                                                   │                  │            │
                                                avg_unit          peak_unit        │
                                                   └──► result_data_buffer ───────┘
 bus_* ◄──► host_if ◄──► control_unit (SETUP / START / STOP, cycle count)
 ref_clk, marker ──► time_stamp (latched at each cycle start)
```

| file | role |
|---|---|
| `psa_pkg.sv` | widths, sample and power types, command codes, register map, flag bits |
| `data_sampler.sv` | turns the two double-data-rate lanes back into 4-channel sample sets |
| `input_fifo.sv` | dual-clock FIFO: strobe domain → system clock |
| `channel_buffer.sv` | 2 × 256-sample banks per channel; one fills while the other feeds an FFT |
| `chsep_power.sv` | splits each complex FFT output into two real spectra; 32-bit power |
| `avg_unit.sv` | sums 128 blocks per frequency point in 39-bit accumulators, divides by 128 |
| `peak_unit.sv` | largest power per point, with the index of the block it came from |
| `input_data_buffer.sv` | packs 8 sample sets per 128-bit SDRAM word and queues them (uses `sync_fifo.sv`) |
| `result_data_buffer.sv` | stores one averaging period's results; sends 256 averages, then 256 peaks |
| `sdram_mux.sv` | one write port, two circular address areas, input has priority |
| `control_unit.sv` | SETUP / START / STOP, restart of the pipeline, cycle counting, sticky flags |
| `host_if.sv` | register bus decoding and read mux |
| `time_stamp.sv` | reference-clock counter cleared by the marker; marker counter |
| `psa_top.sv` | wires it all together; the FFT and SDRAM signals are top-level ports |

## Sampling and the clock crossing

Each lane carries two channels. Its four lines change on both edges of the
strobe. The convention used here:

- while the strobe is high, lane A holds CH1 and lane B holds CH3;
- while the strobe is low, lane A holds CH2 and lane B holds CH4.

`data_sampler` uses the strobe itself as its clock:

- the falling edge stores CH1 and CH3;
- the rising edge completes the set and registers {CH4, CH3, CH2, CH1}
  with `set_valid`.

The lanes must therefore stay valid for a small hold time after each edge.
The end-to-end test changes them 2 ns after the edge. Because the sampler
is clocked by the strobe, there is no required ratio between the strobe and
the system clock. Sampling the lanes with the system clock instead would cap
the input at about a quarter of that clock, short of the 22 MHz target at
66 MHz.

`input_fifo` is a standard Gray-pointer asynchronous FIFO, 16 sets deep:

- it is written on the strobe and read on `clk`;
- a set that arrives while the FIFO is full is lost, because the input
  cannot be held back;
- each lost set flips a toggle in the strobe domain, which reaches `clk` as
  one `overflow` pulse;
- the `running` enable is carried the other way through a two-flop
  synchronizer. A few sets around START and STOP can therefore be taken or
  skipped.

A set leaves the FIFO only when all four channel buffers and the raw-input
packer can take it. The raw data kept in the SDRAM and the data
transformed are therefore always the same sets.

## Two real channels per complex FFT

This is the least obvious part of the design. An N-point complex FFT can
transform two real signals at once. Feed one as the real part and the
other as the imaginary part: x = a + jb. A real signal's spectrum is
conjugate-symmetric, A[N−k] = A[k]*, so the two spectra can be taken apart
using the output at k and at N−k. Write X[k] = R_k + jI_k and
X[N−k] = R_m + jI_m:

```
 Re A[k] = (R_k + R_m) / 2        Im A[k] = (I_k − I_m) / 2
 Re B[k] = (I_k + I_m) / 2        Im B[k] = (R_m − R_k) / 2
```

Index N−k is taken modulo N, so point 0 pairs with itself. Core A gets
CH1 + jCH2 and core B gets CH3 + jCH4. Each 4-bit sample sits in the top
four bits of a 16-bit FFT input word.

`chsep_power` works as follows:

- It stores one whole output frame of each core, 256 × 32 bits each,
  written by output index. The cores therefore may emit results in any
  order, as long as the index comes with them.
- When both frames are complete, it walks k = 0..255, reading X[k] and
  X[N−k] from each frame.
- For each k it forms the four channel spectra as above, with each halving
  done as an arithmetic shift.
- It computes power = Re² + Im² as an unsigned 32-bit value, and emits one
  {CH4, CH3, CH2, CH1} power set per clock.

A frame that arrives while the previous pair is still being walked raises
`overrun`. Both cores are always started on the same clock, so in practice
they deliver their frames together.

The source prints the two formulas built from I_k and I_m (Im A and Re B)
with the sum and the difference the other way round. That version does not
separate the channels: it mixes the two signals of a core. The unit test
compares the separated powers with the spectra of the two signals
transformed one at a time, and so catches the difference. The form above
is the mathematically correct one.

## Averages, peaks and the result layout

An averaging period (STA, "short term accumulation") is 128 blocks of 256
points.

`avg_unit` keeps one 39-bit accumulator per point and channel. 39 bits hold
128 × (2³²−1). Each accumulator works like this:

- the first block of an STA loads it;
- later blocks add to it;
- on the last block the sum >> 7 (truncated) is output instead of being
  stored back.

`peak_unit` keeps the largest power and the block index (0..127) where it
occurred. Ties keep the earlier block. Its output word packs both into 32
bits: `{peak[31:7], block[6:0]}`. The lowest 7 bits of the peak value are
given up for the index.

Both units read-modify-write a 256-entry memory with a two-clock pipeline,
at one point per clock.

`result_data_buffer` collects one STA's results and sends 512 words of 128
bits each:

- first the 256 averages;
- then the 256 peaks.

A build with only one of the two units (`AVG_EN` or `PEAK_EN` cleared)
sends just that unit's 256 words.

One word holds the four channels, with CH1 in bits 31:0. If a new STA
finishes before this transfer is done, its results are dropped and the
`result_overrun` flag is set. At full size an STA lasts about 100 k clocks
and the transfer 512.

## SDRAM areas

Word addresses are 23 bits, for 128 MB of 16-byte words. Addresses are
configured in blocks of 32 words. 32 words is exactly one 256-sample block
of raw input: 8 sets per word, with the oldest set in bits 15:0 and CH1 in
the lowest 4 bits of each set.

- The input area runs from word 0 to the last word of block
  `INPUT_LAST`.
- The result area runs from the first word of block `RESULT_START` to the
  last SDRAM word.
- Each area is a circular buffer. Its pointer wraps to the area's start
  when it passes the area's end.
- When both streams have a word, the input word is written first.
- START reloads both pointers.
- The Status register shows the next result address, so a host can follow
  the writer.

## Commands and registers

The register bus works as follows:

- `bus_cs` with `bus_we` writes `bus_wdata` to `bus_addr` in that clock;
- `bus_cs` without `bus_we` returns the register on `bus_rdata` one clock
  later.

| addr | name | access | meaning |
|---|---|---|---|
| 0 | COMMAND | W | bits 1:0 — 1 SETUP, 2 START, 3 STOP |
| 1 | INPUT_LAST | RW | last block of the input area (staged until SETUP) |
| 2 | RESULT_START | RW | first block of the result area (staged until SETUP) |
| 3 | STATUS | R | SDRAM address of the next result word |
| 4 | TIMESTAMP | R | timestamp latched at the start of the current cycle |
| 5 | MARKER | R | marker count latched at the start of the current cycle |
| 6 | TS_LIVE | R | running timestamp counter |
| 7 | MK_LIVE | R | running marker counter |
| 8 | FLAGS | R | bit 0 running, 1 input FIFO overflow, 2 FFT overrun, 3 result overrun (bits 1-3 sticky, cleared by START) |

The three commands:

- **SETUP** copies the two staged block addresses into the active
  configuration.
- **START** does three things:
  - sets running;
  - clears the sticky flags;
  - sends a one-clock restart through the whole pipeline. The FIFOs,
    channel banks, FFT cores (`fft_clear`), separator frames and
    accumulators are emptied, and both SDRAM pointers are reloaded. A
    partial STA is discarded.
- **STOP** clears running. The sampler stops accepting sets, and the SDRAM
  port is held.

A cycle is 128 STAs, or 128 × 128 × 256 sample sets. At the first set of
every cycle, the timestamp and marker counters are copied into TIMESTAMP
and MARKER.

- The timestamp counts rising edges of `ref_clk`. Each marker pulse clears
  it to zero.
- The marker counter counts marker pulses. Only reset clears it.

Both inputs are synchronized into `clk`, so each must stay below half the
clock rate.

## Interfaces to the external parts

**FFT cores (`fa_*`, `fb_*`).**

- A frame starts when all four channel buffers hold a full bank, both cores
  show `in_ready` and the engine is running.
- The frame is then 256 consecutive `in_valid` beats into both cores.
- The core returns 256 results, each with `out_valid` and its index
  `out_idx`. Any order is accepted.
- A core must not offer `in_ready` again before it has emitted the previous
  frame's results.
- `fft_clear` pulses on START.
- The data are 16-bit two's complement. The testbench model scales by 1/N.
  With 4-bit inputs, no power value then comes near 32 bits.

**SDRAM (`sdram_*`).** A write-only valid/ready port carrying a 23-bit word
address and 128 bits of data. A word is written when both `sdram_valid` and
`sdram_ready` are high. Reading by the host goes through the SDRAM
controller and is outside this design.

## Throughput

The system-clock side moves one sample set per clock. The sampler takes one
set per strobe period at any rate. The FFT cores set the limit:

- a core that needs about three clocks per point (load, compute, unload)
  takes 768 clocks per 256-point frame;
- at 66 MHz that is 22 M points per second, so 22 MHz per channel.

The engine adds 2 clocks per frame: a frame starts every 770 clocks when
the cores are the limit. At 66 MHz this gives a ceiling of 21.94 MHz per
channel, 0.3% short of 22 MHz. With exactly 22.0 MHz input, the 16-deep
FIFO would overflow after some tens of frames. `tb_psa_rate` measures this
at the default size with a 66 MHz clock:

- at 21.7 MHz, one full STA completes with no set lost;
- at 22.5 MHz, the frame period and the overflow flag are checked.

Raw input needs one SDRAM word per 8 sets, 2.75 M words per second at
22 MHz. Results add 512 words per STA.

## Departures and own choices

- **Two FFT cores.** The source describes two 256-point complex cores in
  one place and a single core emulating two in another. This design
  follows the block diagram and uses two.
- **Average and peak in one design.** The source built the average and
  the peak as separate FPGA configurations. Here both are present by
  default. The total on-chip memory is then about 172 kbit:
  - channel banks 8 k;
  - FFT frame stores 16 k;
  - accumulators 40 k;
  - peak store 40 k;
  - result buffer 64 k;
  - FIFOs 2 k.

  That is more than an XCV800's 28 block RAMs of 4 kbit. The top-level
  parameters `AVG_EN` and `PEAK_EN` build the single-function devices
  instead, at about 100 kbit each. With one unit left out, each STA sends
  only that unit's 256 words.
- **Separation formulas.** Corrected as described above.
- **Own choices where the source is silent:**
  - which strobe half carries which channel;
  - the 16-bit FFT data format;
  - the 128-bit SDRAM word and the packing of 8 sets per word;
  - the 32-word address block;
  - input priority at the SDRAM;
  - FIFO depths;
  - the register map and bus timing;
  - the peak-word bit split;
  - 39-bit accumulators with a truncating divide;
  - the restart behaviour of START;
  - the separate live and latched counter registers.
- **Not covered.** The host side (DMA, the PCI control FPGA), the LVDS
  receivers and the SDRAM controller.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and stops on a watchdog if it hangs. Random
stimulus uses `$urandom`, and nothing relies on x or z. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
    -y rtl -y tb +libext+.sv -Irtl rtl/psa_pkg.sv tb/tb_psa_top.sv \
    --top-module tb_psa_top -o sim && obj_dir/sim
```

Replace `tb_psa_top` with any other testbench name.

- **`tb_psa_top`** runs the whole engine at reduced size: 32-point blocks,
  8 blocks per STA, 2 STAs per cycle, a 4096-word SDRAM.
- **`tb_psa_full`** runs the same test with every parameter at its default,
  through two complete 128-block STAs. It takes a few seconds.
- **`tb_psa_avg`** and **`tb_psa_peak`** run the reduced test on the
  average-only and peak-only builds.
- **`tb_psa_rate`** runs the default-size engine at the 66 MHz clock and
  checks the input rate it sustains (see Throughput).

Both play the board around the engine:

- four test tones plus noise on the lanes at a 21.7 MHz strobe, with a
  100 MHz system clock;
- reference clock and marker pulses;
- two behavioural FFT cores (`fft_core_model.sv`, 3 clocks per point);
- the control FPGA's register accesses.

They check:

- every result word against a reference computed from the FFT outputs the
  testbench observes, and its SDRAM address;
- every raw-input word against the sets that were sent;
- that each channel's averaged spectrum peaks at its tone;
- the registers.

They also force and count each mechanism: bank swaps, write stalls while the
FFTs are held off, input FIFO overflow while the SDRAM is held off, STA
completions, wraps of both areas, contention at the SDRAM port, cycle-start
latching, STOP/START restart and marker clears.

The unit testbenches check the blocks against independent models:

- `tb_chsep_power` uses integer separation formulas on random frames, and
  floating-point DFTs of known channel signals, taken one at a time;
- `tb_avg_unit` and `tb_peak_unit` use full-width sums and maxima;
- `tb_input_fifo` uses sequence-numbered words across two unrelated
  clocks, checking loss accounting and clear;
- the others each have a model of their own block.

What simulation cannot show:

- timing closure at 66 MHz;
- the real FFT core's exact handshake and scaling;
- behaviour with a real SDRAM controller.
