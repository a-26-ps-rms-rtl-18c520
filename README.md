# Carry-chain time-to-digital converter core

This is a time-to-digital converter (TDC) for small FPGAs. It stamps every rising and
falling edge of its input signals with a resolution far finer than the period of the
system clock. The timestamp has two parts:

* the **coarse** part is simply the number of system clock cycles, from a counter;
* the **fine** part comes from a tapped delay line. The input edge runs along a chain of
  small delay elements, and at every clock edge all the taps are sampled. The number of
  taps the edge has passed gives its arrival time within the cycle.

The delay elements are the carry logic of a Xilinx Spartan-6 (124 `CARRY4` cells, 496
taps). Their delays are uneven and drift with process, voltage and temperature, so
the tap count is converted to time through a per-channel look-up table (LUT). That table
is built in two ways:

* **startup calibration** is a code-density test against an on-chip ring oscillator that
  runs asynchronously to the system clock;
* **online calibration** then corrects the table continuously from the measured
  frequency of a second ring oscillator placed next to each delay line. It never stops
  the measurements.

The architecture, the calibration equations and the main numbers follow S. Bourdeauducq,
"A 26 ps RMS time-to-digital converter core for Spartan-6 FPGAs" (FPGAworld 2012). That
description leaves the word widths, encodings, handshakes and most of the control
sequence open. The choices made here are listed in the last section.

## Block structure

```
                 +----------------------- channel c (x CHANNELS) ------------------------+
 signal_i[c] --->|mux|-> carry chain -> 2nd sample row -> encoder -> LUT -> deskew ------+--> detect/polarity/raw/fp
 calib (RO) ---->|   |   + slice FFs      + reorder       |   ^      (port A)   ^        |
                 |  ^                                     |   |                 |        |
                 |  sel                       ring osc.   |   | port B (load)   coarse   |
                 +--|-----------------------------|-------|---|-----------------|--------+
                    |                             v       v   |                 |
                 controller <---------- frequency counter     |          coarse counter <-- cc_rst_i
                  |  |  ^----------- enc. detect/raw (hits)   |                 --> cc_cy_o
                  |  +-------------- histogram memory         |
                  +----------------- LUT load ----------------+
```

| Module | Role |
|---|---|
| `tdc` | top: channel bank, controller, calibration ring oscillator |
| `tdc_channelbank` | the channels plus the shared coarse counter, histogram memory and frequency counter |
| `tdc_channel` | one channel: `tdc_inmux`, `tdc_carry_chain`, `tdc_reorder`, `tdc_encoder`, `tdc_lut`, `tdc_deskew`, `tdc_ringosc` |
| `tdc_controller` | startup and online calibration, ready flag, debug read-back; uses `tdc_divider` |
| `tdc_pkg` | default sizes |
| `tdc_carry_chain`, `tdc_ringosc`, `tdc_pvt_pkg` | behavioural models of the FPGA-specific parts (see below) |

## The delay line, its numbering and the raw value

This is the least obvious part of the design.

The edge enters the carry chain at the `CYINIT` pin of the bottom `CARRY4`. The `S`
inputs are tied to 1, so every `MUXCY` passes the carry unchanged. Each `CO` output is
sampled by the flip-flop in the same slice, then sampled a second time. The second row
also lets metastable first-row samples settle.

The chain's look-ahead logic makes some outputs switch *before* outputs that are
physically earlier. The taps are therefore permuted by a fixed wiring (`tdc_reorder`)
so that the edge reaches them strictly in order. The permutation depends on the real
silicon timing. Here it is a parameter, `PERM`: `PERM[j]` is the output of each `CARRY4`
that switches j-th. The default `{0,2,1,3}` matches the model chain. After reordering, the
line is a thermometer: the taps the new edge has reached, then the taps still at the old
level. An older edge may still show further down the line.

Numbering: after reordering, **bit N-1 is the first tap and bit 0 the last** (N = 496).
A hit "at output n" means that the edge reached tap n but not tap n-1. The encoder:

* detects an edge when the first tap differs from its value in the previous cycle. The
  polarity is the new level, 1 for a rising edge;
* counts the run of bits equal to the first tap, starting at bit N-1;
* outputs `raw = N - count`, which is that index n.

A large raw value therefore means a *late* edge, one that travelled only a short way.

The encoder has two pipeline stages. The first registers, for each group of 16 taps,
whether the whole group is in the run and the length of the run inside it. The second
finds the first broken group.

## Calibration

Notation: H(n) is the number of calibration hits at raw value n. C is the total number
of hits. F is the number of fractional bits of the timestamp (`FP_W`). P is the number of
extra histogram bits (`EXHIS_W`). The controller always collects C = 2^(F+P) hits.

**Startup calibration.** The calibration oscillator is asynchronous to the system clock,
so its edges fall uniformly over the clock period. The number of hits at a tap is then
proportional to the width of the bin in front of that tap, and all the widths add up to
one clock period. The time from an event to the sampling clock edge, counted backwards
and with the first tap as origin, is

    R0(n) = Tsys / C * sum_{i=n}^{N-1} H(i)      ->  in units of 2^-F periods:  S(n) / 2^P

where S(n) is the running sum of the histogram from the top. The controller builds the
sum while it walks n from 2^RAW_W-1 down to 0, and writes each entry as it goes.

**Online calibration.** Each channel's ring oscillator is built from the same kind of
logic, in the same place, as its delay line, so its frequency drifts with the same
temperature and voltage. Its frequency f0 is measured right after the histogram is
complete. From then on the controller measures f again for each channel in turn, and
rewrites that channel's LUT as

    LUT[n] = min( floor( S(n) * f0 / (f * 2^P) ),  2^F - 1 )

At startup f = f0, so the same expression gives the startup table. Writes go through the
LUT's second port, so the datapath keeps converting while the table is rewritten. Warmer
silicon is slower: f < f0, and entries near one full period would pass 1 - 2^-F. They are
saturated at that value, because they correspond to delays beyond one clock period,
which should almost never be used.

**Fixed-point output.** `fp_o` has COARSE_W integer bits (clock cycles) and F fractional
bits:

    fp = coarse_at_sampling_edge * 2^F - LUT[raw] + deskew     (mod 2^(COARSE_W+F))

The fraction is subtracted because R is counted backwards from the clock edge that took
the sample. The deskew constant lets the timestamps refer to the origin of the system
clock, or line up channels with different input paths.

## Controller sequence

After `rst_i`, for each channel in turn:

1. clear the channel's histogram (2^RAW_W cycles);
2. switch the channel's input multiplexer to the calibration oscillator, wait 8 cycles,
   then book hits until C are counted. Each hit is a read-modify-write of the histogram
   and takes two cycles;
3. switch back to the user signal and measure the ring oscillator: this gives f0;
4. run a LUT pass: 2^RAW_W entries, each taking a histogram read, an accumulation and a
   sequential division of DW = F+P+1+FCOUNT_W bits. That is about 35 cycles per entry.

`ready_o` then rises, and the controller loops over the channels forever. For each
channel it measures f (2^FTIMER_W cycles) and then runs a LUT pass.

At default sizes, one startup calibration takes about 880,000 cycles, or 7 ms at
125 MHz. Most of that is the 2 x 131,072 hits, at one hit per 3 to 4 cycles. One online
pass takes about 34,000 cycles per channel.

The debug port reads back the table and histogram. While `dbg_req_i` is held, the
controller reads LUT[`dbg_addr_i`] and H(`dbg_addr_i`) of channel `dbg_chan_i`, and
pulses `dbg_ack_o`. It serves requests only while it waits for a frequency measurement,
because its memory ports are idle then. Each read takes 3 cycles. `dbg_freq_o` and
`dbg_freq0_o` show the last and the reference oscillator count of each channel.

The channels' `detect_o` is not masked while a channel is being calibrated: treat the
outputs as valid only once `ready_o` is high.

## Timing

* **Latency: 6 clock edges.** The slice flip-flops sample on edge 1. The second sample
  row is edge 2, the two encoder stages are edges 3 and 4, the LUT read is edge 5 and
  the deskew adder is edge 6. `detect_o`, `polarity_o`, `raw_o` and `fp_o` come out
  together, right after edge 6. The coarse count is delayed 4 cycles inside the channel,
  so the value used is the count at the sampling edge.
* **Dead time: 3 cycles.** After a detection, the encoder ignores new edges for 2 more
  cycles. Edges on one channel must be at least 3 clock cycles apart, or the later one is
  lost. The two-cycle histogram update relies on this spacing, and the controller asserts
  it.
* **Delay line length.** The line must be longer than one clock period. The model line is
  about 9.8 to 10.0 ns long, against an 8 ns clock.
* **Coarse counter.** `cc_rst_i` clears it. `cc_cy_o` pulses for one cycle when it wraps.

## Parameters (top level `tdc`)

| Parameter | Default | Origin |
|---|---|---|
| `CHANNELS` | 2 | as evaluated in the original design |
| `CARRY4_COUNT` | 124 (496 taps) | as evaluated in the original design |
| `RAW_W` | 9 | ceil(log2 496) |
| `FP_W` (F) | 13 | own choice: 8 ns / 8192, about 1 ps per LSB |
| `EXHIS_W` (P) | 4 | own choice: C = 2^17 hits |
| `COARSE_W` | 25 | own choice |
| `FCOUNT_W`, `FTIMER_W` | 13, 14 | own choice; about 2900 counts per 2^14 cycles, the scale the original design reports |
| `DEADTIME` | 3 | as in the original design |
| `RO_HALF_PS`, `CAL_HALF_PS` | 22600, 24701 | model oscillators only |

The histogram bins are F+P+1 = 18 bits wide, and there is one histogram of 2^RAW_W bins
per channel.

## Behavioural models

Three parts are FPGA-specific and are modelled rather than written as logic:

* `tdc_carry_chain` stands for the `CARRY4` column with its slice flip-flops. It
  remembers the last 8 input changes. At each clock edge it sets tap k to the input level
  `delay(k)` earlier.
  * The delays come from a fixed pseudo-random sequence: steps of 0 to 70 ps, 7 in 16 of
    them zero, since real carry chains show nearly half of their bins at zero width.
  * Outputs 1 and 2 of every cell are swapped in delay order.
  * `SEED` changes the pattern, and each channel gets its own seed.
  * A real design instantiates the vendor primitives here and constrains their
    placement.
* `tdc_ringosc` is a free-running oscillator with a fixed half period. In silicon it is a
  loop of LUTs, which needs placement constraints and combinational-loop waivers.
* `tdc_pvt_pkg::delay_scale` multiplies every delay of both models. Testbenches use it
  to emulate temperature changes. The original measurements showed a 1.3 % change over
  15 degrees C.

The rest is synthesizable. The LUTs and the histogram are written as arrays, so that
they map to block RAM.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. The system-level ones:

* `tb_tdc_channel` runs one full-size channel. The testbench calibrates it itself from
  20,000 random edges, then checks 3,000 timestamps against the true edge times. It
  requires a latency of 6 cycles, errors of at most 150 ps, a standard deviation below
  40 ps and a mean error within 60 ps. It measures a standard deviation of about 24 ps.
* `tb_tdc` is an end-to-end run with reduced calibration sizes (F = 8, P = 2, 12-bit
  coarse counter). It covers:
  * startup calibration and the ready flag;
  * latency and the dead time;
  * coarse overflow;
  * the differential measurement (mean 2037 ps, sigma 29 ps);
  * heating by 3 %: the oscillator counts drop, the LUT entries scale by f0/f, more
    entries saturate, and the differential measurement stays at 2 ns;
  * debug reads.
* `tb_tdc_full` runs the top at its default sizes and repeats the original evaluation:
  * two startup calibrations at the same temperature: the LUTs differ by at most 1 ps.
    The model calibration oscillator has no jitter, so this is far better than
    hardware, where the difference was up to about 17 ps;
  * the differential measurement, one source reaching the two channels 2 ns apart: mean
    2022.9 ps, sigma 24.3 ps, or 17.2 ps per channel;
  * heating from 37 to 47.875 degrees C (delays +0.94 %). The oscillator counts fall from
    2900/2887 to 2873/2860. The table corrected online differs from a fresh startup
    calibration at the new temperature by 0.68 ps on average (2.9 ps at most). The
    uncorrected table differs by 30.2 ps on average (75 ps at most).

  It takes about 20 s of simulation.
* `tb_tdc_rofreq` also runs the top at default sizes. It sweeps the emulated temperature
  from 29.5 to 43.5 degrees C in 1-degree steps and reads the oscillator counts the core
  reports. The counts go from 2919/2906 down to 2884/2871: a 1.2 % drop, linear within
  one count, with the two channels' slopes equal within 2 %. Each count is checked
  against the value expected from the oscillator period.
* `tb_tdc_multi` builds the core with three channels, a count that is not a power of
  two. The calibration is reduced (F = 8, P = 2), but the delay lines are full length.
  It reads every channel's histogram and LUT back through the debug port, and checks
  them against each other and against the hit count. It then feeds one source to the
  three channels with 1 ns steps in delay, and measures 1027 ps and 1999 ps.

The precision figures come from the idealised delay-line model. They check the logic
and the arithmetic. They predict nothing about the jitter of real silicon.

To run a testbench with Verilator 5 (from the directory that holds `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_tdc_full \
    -y rtl -y tb +libext+.sv rtl/tdc_pkg.sv rtl/tdc_pvt_pkg.sv tb/tb_tdc_full.sv
./obj_dir/Vtb_tdc_full
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`.

## Departures from the original design, and choices made here

* **Calibration sum.** Two statements in the original description disagree by one bin.
  Summing the bin widths W0(n) = H(n+1)/C * Tsys gives the sum of H(i) for i > n. The
  stated closed form sums H(i) for i >= n. This RTL implements the closed form, so each
  timestamp is taken at the far end of its bin. That gives a systematic bias of half a
  bin on average: the mean error is about -33 ps in `tb_tdc_channel`, where the
  widest bins are 70 ps. The offset differs slightly between channels, because their
  bins differ; that explains part of the 23 ps excess in the differential mean.
* **Histogram memory.** The original shows one histogram memory shared by the channels.
  Here that memory is split into one region per channel, and each region is kept after
  startup: online calibration recomputes R0(n) from it instead of storing a second
  table.
* **Input path.** The original input path also has an inverter per channel, whose role is
  not described. It is not built. The LVDS input buffers and the placement constraints
  (floorplan) are outside the RTL.
* **Outputs.** In the original block diagram, detection and polarity leave the channel
  straight after the delay line, and the raw value after the encoder. Here all per-event
  outputs are aligned with the calibrated timestamp.
* **Dead time.** The 3-cycle dead time is the original's figure, but its cause is not
  described. Here it is an explicit hold-off in the encoder. With a dual-ported histogram
  it could be reduced to 1 cycle.
* **Own choices.** The frequency counter resynchronises the oscillator and counts its
  edges; this assumes the oscillator runs below half the clock frequency. The controller
  order, the 8-cycle settling time after switching the multiplexer, the sequential
  divider, the debug protocol and all the widths in the parameter table marked "own
  choice" are this design's own.
