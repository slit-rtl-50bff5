# SliT128C digital readout: RTL

The SliT128C is a 128-channel readout chip for silicon strip sensors, built for
a muon g-2/EDM experiment in which positrons from muon decays have to be timed
very precisely. Each strip channel turns a charge pulse into one digital "hit"
line whose leading edge does not depend on the size of the pulse (time walk
under a nanosecond between 0.5 and 3 MIP). The digital part of the chip does
not measure anything itself: it takes a snapshot of all 128 hit lines every
5 ns, keeps 8192 snapshots (40.96 us, longer than the 33 us a muon fill is
observed), and between beam spills, which come at 25 Hz, sends the whole
record off the chip on a serial line.

This RTL describes that digital part, plus the small piece of logic that
closes each analog channel (the AND of its two discriminators). The analog
front end itself is not logic and is represented only by a behavioural model
used in the top-level testbench.

## How a hit is formed

Each analog channel is a charge-sensitive amplifier, a CR-RC shaper (peaking
time about 35 ns), an optional x2 inverting amplifier, and then two paths:

* the shaper output goes to discriminator "CRRC" with a threshold near
  0.3 MIP;
* the shaper output is also differentiated by a CR stage. The derivative of
  the shaper pulse is bipolar and crosses the baseline exactly at the shaper's
  peak, whatever the charge. Discriminator "DIFF", set just below the
  baseline, fires at that crossing.

A leading edge from the shaper discriminator moves by many nanoseconds with
the charge (a small pulse crosses a fixed threshold late). The zero-crossing
edge does not. But the differentiated signal is noisier, so the final hit is
the AND of both: the leading edge comes from DIFF, the trailing edge from
CRRC, and noise that only trips DIFF is rejected. Each discriminator can be
switched off; with DIFF off the hit is the plain CR-RC time over threshold
(used for comparison and for time-over-threshold studies).

`hit_combiner` implements this AND with the enables. A switched-off
discriminator drops out of the AND; with both off the channel is silent.

## Clocks and sampling

Everything runs from one external 200 MHz clock, `clk200`. 200 MHz is close
to the fastest that logic in this 180 nm process runs, so only the first
sampling flip-flop works at that rate:

```
            clk200 (5 ns)   CLK_P (10 ns)          CLK_N (10 ns, inverted CLK_P)
hit[127:0] ──► FF ──► s200 ──┬──► FF ──► data_p ──► write port of SRAM P
                             └──► FF ──► data_n ──► write port of SRAM N
```

`timing_generator` divides `clk200` by two on its **falling** edge to make
CLK_P, and CLK_N is its inverse. Every 100 MHz rising edge therefore falls in
the middle of a 200 MHz period, half a period after the `clk200` edge that
launched `s200`. CLK_P picks up the samples of even 5 ns slots, CLK_N those of
odd slots, and each 100 MHz path has a full 10 ns per word.

The time order of the two streams is fixed by the start strobe. Write Start
and Read Start are asynchronous levels; each passes through a two-flop
synchroniser and its rising edge becomes a strobe two `clk200` cycles wide.
The strobe is only started in a `clk200` cycle whose next falling edge is a
CLK_P rising edge. So CLK_P sees it first and CLK_N 5 ns later, each exactly
once, and within a memory address the CLK_P word is always the earlier
sample. Because of the pipeline, the first stored sample is the one taken two
`clk200` edges before the edge that raised the internal write strobe.

The 50 MHz serial clock `sclk` is CLK_P divided by two; nothing inside the
chip is clocked by it.

## Storing a fill

`memory_controller` holds `mem_write_ctrl`, two `sram` arrays of 4096 x 128
bits, and `mem_read_ctrl`. One word is the hit map of all 128 channels for
one 5 ns slot; the two memories together hold 8192 slots = 40.96 us.

On the write strobe each side of the write controller starts at address 0 and
writes one word per cycle of its own clock. After address 4095 it stops and
raises `full`. Data arriving later are dropped; nothing wraps around. A new
Write Start begins a new fill at address 0, also in the middle of one. Storage
is a plain bitmap, so the recorded content does not depend on the hit rate:
any pattern of hits within the window is kept exactly, at 5 ns resolution.

## Reading out

On the read strobe, `mem_read_ctrl` reads P[0], N[0], P[1], N[1], ... and
hands each word to the serializer over a valid/ready handshake. This
interleaving puts the stream back in time order; it plays the part of the
"event building" step. A Read Start during a readout is ignored.

`serializer` shifts each word out MSB first (channel 127 first), one bit per
10 ns CLK_P cycle, with no gap between words. `sdata` changes on CLK_P rising
edges, which are also the edges of `sclk`. Each edge of `sclk`, rising and
falling, therefore starts one bit: a 50 MHz DDR link carrying 100 Mbit/s. The
receiver should sample mid-bit, 5 ns after an `sclk` edge. `sdata_valid` is
high for every data bit.

The frame for a full readout has these numbers:

| quantity | value |
|---|---|
| words | 8192, slot 0 first |
| bits per word | 128, channel 127 first |
| bits | 1,048,576 |
| bit period | 10 ns (one `sclk` edge per bit) |
| readout time | 10.49 ms, plus a few cycles to start |
| time between spills (25 Hz) | 40 ms |

## Slow control

`param_ctrl` keeps a 20-bit control register for each channel and drives it
to the analog part (`cfg` port, type `slit_pkg::ch_cfg_t`). It is written
through a 2560-bit shift chain:

* `sc_din` is shifted in at the low end on each rising `sc_clk` edge.
  Channel 127's 20 bits go first and channel 0's last.
* `sc_dout` is the top bit of the chain. While a new image goes in, the
  previous image comes out in the same order.
* A rising `sc_clk` edge with `sc_load` high copies the chain into all
  registers at once and does not shift. So the analog switches never see a
  half-shifted pattern, and an image can be shifted in while the chip records
  and then applied at a chosen moment.
* The host clocks `sc_clk` only while it shifts or loads.
* Reset clears everything, which turns all discriminators off.

Register layout (bit 19 to bit 0):

| bits | field | function |
|---|---|---|
| 19:13 | `dac_diff` | 7-bit baseline tuning DAC, differentiator path |
| 12:6 | `dac_crrc` | 7-bit baseline tuning DAC, CR-RC path (1 LSB is about 0.043 fC) |
| 5:4 | `mon_en` | analog monitor-line switches |
| 3 | `enb_comp2` | CR-RC discriminator enable |
| 2 | `enb_comp1` | differentiator discriminator enable |
| 1 | `enb_gain2` | x2 inverting amplifier enable |
| 0 | `tp_en` | test-pulse injection switch |

## Files

| file | contents |
|---|---|
| `rtl/slit_pkg.sv` | channel count, memory depth, register type |
| `rtl/slit128c.sv` | top: everything below, wired as in the chip |
| `rtl/hit_combiner.sv` | per-channel AND of the two discriminators |
| `rtl/timing_generator.sv` | CLK_P/CLK_N/sclk, start synchronisers and strobes |
| `rtl/signal_if.sv` | 200 MHz sampling, 100 MHz resampling |
| `rtl/memory_controller.sv` | write controller, two SRAMs, read controller |
| `rtl/mem_write_ctrl.sv`, `rtl/mem_read_ctrl.sv`, `rtl/sram.sv` | its parts |
| `rtl/serializer.sv` | 128:1 serializer with handshake |
| `rtl/param_ctrl.sv` | slow-control chain and channel registers |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_slit128c_rate.sv` | full-size test at 1.4 MHz hit rate per strip |
| `tb/analog_channel_model.sv` | behavioural analog channel for the top test |

Top-level ports of `slit128c`:

* inputs `clk200` and `rst_n`;
* inputs `write_start` and `read_start`;
* inputs `disc_diff[127:0]` and `disc_crrc[127:0]`, from the discriminators;
* slow control: inputs `sc_clk`, `sc_din`, `sc_load`, output `sc_dout`;
* output `cfg[128]`, to the analog channels;
* outputs `sclk`, `sdata`, `sdata_valid`, to the LVDS drivers.

Parameters `NUM_CH` (128) and `DEPTH` (4096 words per SRAM) can be lowered
for quick experiments.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. With
Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  --top-module tb_slit128c rtl/slit_pkg.sv tb/tb_slit128c.sv
./obj_dir/Vtb_slit128c
```

Replace `tb_slit128c` by `tb_serializer`, `tb_param_ctrl`, and so on, for the
unit tests. `tb_slit128c` runs the full-size chip through one complete cycle:

1. it programs all registers;
2. it records a fill with about 90 charge injections and two test pulses;
3. half-way through the fill it switches all channels from AND mode to
   CR-RC-only mode by a register load;
4. it reads out all 1,048,576 bits.

It compares every received word with hit maps it builds itself from the
model's discriminator outputs. It also checks the fill time, the readout time
and the readback, and that sub-threshold, masked and post-fill charges leave
no trace. It takes about 30 s. With the model's constants it reports:

* AND mode: the leading edge of every hit lands in the same 5 ns sample at
  all charges from 0.5 to 3 MIP;
* CR-RC-only mode: the leading edge moves over four samples;
* at 1 MIP, the time over threshold is shorter in AND mode (70 ns) than in
  CR-RC-only mode (100 ns).

`tb_slit128c_rate` runs the full-size chip at the highest hit rate it is
meant for: 1.4 MHz on every one of the 128 strips at once. It drives the
discriminator inputs directly with random pulse trains, plus noise pulses on
the differentiator discriminator alone, which the AND must reject. About 7300
hits land in one fill, and every word of the readout must match. It takes
under 10 s.

The unit testbenches use small memories and channel counts. Each checks its
module against a reference of its own, including cycle counts: fill time,
three cycles per word in the read controller, N*WIDTH cycles for N words in
the serializer.

## What is this design's own

The block structure follows the chip's published description. So do the
clocks (200 MHz sampling, two 100 MHz phases, 50 MHz DDR output), the 128
channels, the 8192 x 5 ns memory depth, the 20-bit per-channel register and
the AND of the two discriminators. The following were not specified and are
choices made here:

* **Memory organisation.** The 8192 samples are split over the two SRAMs,
  4096 words of 128 bits each, one SRAM per 100 MHz phase. The SRAMs are
  arrays with separate read and write clocks, standing in for the process's
  SRAM macros.
* **Clock generation and start strobes.** The clocks come from a
  falling-edge divider. The start strobes are phase-aligned as described
  above.
* **Readout clock.** The readout side runs on CLK_P. The chip's block
  diagram labels that data "synchronized by external 100 MHz", but the only
  external clock described is the 200 MHz one.
* **Serial output.** One data line, MSB first, edge-aligned to `sclk`, with
  an extra `sdata_valid` line. There is no header or trailer. The receiver
  counts 8192 x 128 bits, or uses `sdata_valid`.
* **Slow control.** The shift-chain protocol, the readback, the register bit
  layout and the reset values are all choices made here.
* **Disabled discriminators.** A disabled discriminator counts as "true" in
  the AND, and a channel with both disabled is silent.
* **Reset.** An asynchronous active-low `rst_n`. The sampling flops have no
  reset.
* **Memory-controller parameters.** The chip's block diagram shows a
  parameter link from the slow control to the memory controller, but what it
  carries is not known. There are no such parameters here.
* **Event building.** The time-ordered merge of the two SRAM streams is this
  design's reading of the "event building" block, which is only named.

Not covered at all are the analog front end (amplifier, shaper,
differentiator, discriminators, DACs, monitor buffers), the LVDS drivers and
the pads. `tb/analog_channel_model.sv` models the front end as ideal
waveforms: no noise, no pile-up, no gain switching. It exists only to drive
realistic hit patterns.
