# Correlation-OTDR acquisition core for fiber temperature sensing

A stretch of optical fiber makes a usable thermometer. Its round-trip group
delay grows by about 7 ppm per kelvin, so if you can time the echo from its far
end to picoseconds, you can read its temperature. A correlation optical
time-domain reflectometer (C-OTDR) does this timing. It sends a known binary
code into the fiber, records what comes back, and cross-correlates the
recording with the code. Each reflecting point along the fiber then shows up
as a sharp peak at its round-trip delay.

This RTL is the programmable-logic part of a portable C-OTDR. It replaces an
arbitrary waveform generator and a 50 GS/s oscilloscope with an FPGA, an
ordinary SFP optical transceiver, and two FPGA high-speed serial links. The
logic does three things:

* it transmits a periodic probing frame: a 512-bit Golay sequence plus a fill
  pattern, at 2.5 Gbit/s;
* it takes the echo as 1-bit samples at 10 GS/s (4 samples per transmitted
  bit) and adds them up, time slot by time slot, over many frames;
* it passes the 16384 sums of one frame period to the processor. Software on
  the processor does the correlation and fits the peaks.

The published system uses the 2.5 Gbit/s / 10 GS/s rates, the 512-bit Golay
sequence, 1-bit slicing, frame-aligned summation in memory, and 4000 traces
per measurement. Everything else described below is this implementation's own
choice and is marked as such: word widths, frame length, memory layout,
control handshake and readout format.

## Why 1-bit samples are enough: summing phase-aligned frames

The receiver has no ADC. The SFP's limiting amplifier and the FPGA's serial
input together act as a comparator, so every sample is just "above" or
"below" the decision level. One such trace carries almost no amplitude
information. The amplitude comes back through averaging. Receiver noise moves
the analogue level across the threshold at random, so the chance of reading a
1 rises with the optical level. Once thousands of traces are summed, each sum
is proportional to the mean optical power in its time slot.

This only works if time slot *s* of every frame sees the same point of the
fiber. Transmitter and receiver must therefore run on the same frame clock. In
this design both serial links are fed from one fabric clock, and one counter
numbers the words of the frame:

| quantity | value | source |
|---|---|---|
| transmit rate | 2.5 Gbit/s | published system |
| receive sample rate | 10 GS/s (4x oversampling) | published system |
| Golay sequence | 512 bits | published system |
| transmit word | 16 bits per clock | this design |
| fabric clock | 156.25 MHz (2.5 G / 16 = 10 G / 64) | follows from the above |
| receive word | 64 samples per clock | follows |
| frame | 4096 bits = 256 clocks = 1.6384 us | this design |
| time slots per frame | 16384, 100 ps each | follows |
| sum width | 16 bits (up to 65535 traces) | this design |

The counter value *k* chooses which transmit word goes out (`frame_gen`). The
same value names the memory row into which the 64 samples arriving in that
clock are added (`trace_accumulator`). Transceivers, fiber leads and registers
add a fixed loop delay. That delay only rotates the summed trace, because the
probing signal is strictly periodic: the echo of frame *n* that arrives during
frame *n+1* is summed into the same slots every time. This is why the frame
must be longer than the Golay burst plus the longest round trip of interest.
At 4096 bits it leaves 3584 bit periods, about 146 m of fiber, for
reflections. Because the trace is circular, peaks that wrap around the frame
boundary are handled by circular correlation in software.

## The probing frame (`golay_gen`, `frame_gen`)

A frame is the 512-bit Golay sequence followed by 3584 bits of fill. A
transmitted 1 is light on (+1 in the correlation) and a 0 is light off (-1).
The sequence is the first member of the standard recursive Golay pair
a' = a|b, b' = a|-b, starting from a = b = [+1]. Element *n* of that sequence
is +1 exactly when the binary form of *n* contains an even number of adjacent
`11` pairs. `golay_gen` evaluates this formula for 16 indices in parallel, so
no table is stored.

The published system does not say which member of the pair is sent, nor what
the fill pattern is. Its laboratory predecessor sent "a burst followed by
zeros", so the fill defaults to all zeros. `FILL_WORD` is a parameter. Bit 0
of each 16-bit word is transmitted first, and bit 0 of each 64-bit receive
word is the earliest sample. Both orders are this design's choice and must
match the transceiver configuration.

`frame_gen` is free-running from reset: its first word after reset is word 0.
It outputs `word_cnt` and a `frame_start` flag together with `tx_data`, all
registered.

## Summing memory (`trace_accumulator`)

The memory holds 256 rows of 64 sums of 16 bits each: 256 Kibit, one row per
clock of the frame. Time slot *s* is row *s*/64, lane *s* mod 64.
Accumulation is a two-cycle read-modify-write:

1. cycle *t*: the row at `acc_row` is read (registered read port, as in a
   block RAM), and the 64 sample bits are registered;
2. cycle *t+1*: 64 adders add one bit each to the sums, and the row is written
   back.

The rows go up by one every clock, so the row being written back is never the
row being read; an assertion checks this. The first frame of a measurement
(`acc_first`) writes the samples instead of adding them. This clears the
previous measurement without a separate clearing pass. The same read port
serves the readout with one clock of latency; the sequencer makes sure both
users never need it in the same cycle. The sums wrap at 2^16, which is why
the trace count is 16 bits.

## Measurement sequence and processor interface (`meas_ctrl`, `sum_readout`)

The processor sets `num_traces` and pulses `start`. The sequencer then goes
through these states:

* `ST_ARM`: wait for the end of the current frame, so that every trace is a
  whole frame.
* `ST_ACCUM`: accumulate for exactly `num_traces` x 256 clocks. `acc_first`
  is high during the first 256 of them. A value of 0 is treated as 1.
* `ST_READOUT`: start `sum_readout` and wait for it.
* `ST_DONE`: pulse `done` for one clock, then return to `ST_IDLE`.

`busy` is high from the start pulse to the end of `ST_DONE`. A `start` pulse
while busy is ignored.

`sum_readout` reads the rows in order into a row buffer. It sends the 16384
sums one per beat, slot 0 first, on a valid/ready stream (`m_valid`,
`m_ready`, `m_data`, `m_last`) that follows the AXI4-Stream rules. `m_last`
marks slot 16383. In a system the stream feeds a DMA engine into processor
memory. At full `m_ready` a row costs 66 clocks, so a readout takes about
0.11 ms.

For the published operating point of 4000 traces, accumulation takes
4000 x 1.6384 us = 6.55 ms. A measurement therefore takes under 7 ms of
logic time. That is far inside the 2 s interval at which the portable
instrument reported temperatures, and it leaves most of the interval to the
processing software.

## What the software does with the sums

The following is not part of the RTL, but it explains what the sums are for.
The processor cross-correlates the 16384 sums, with their mean removed, with
the Golay sequence at 4 samples per bit. It then fits a Gaussian to each
reflection peak to place it to a fraction of the 100 ps slot. The distance
between the peak of a reference reflector at the start of the sensing fiber
and the peak of its end gives the group delay. At 7 ppm/K that delay becomes
a temperature. The end-to-end testbench performs the correlation step, but
not the fit, to show that the peaks land where they should.

## Interface of the top level, `cotdr_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | 156.25 MHz fabric clock; synchronous active-low reset |
| `tx_data` | out | 16 | to the 2.5 Gbit/s serializer, bit 0 first |
| `frame_start` | out | 1 | high during word 0 of each frame |
| `rx_data` | in | 64 | from the 10 GS/s deserializer, 1-bit samples, bit 0 earliest |
| `start`, `num_traces` | in | 1, 16 | begin a measurement of `num_traces` frames |
| `busy`, `done`, `meas_state` | out | 1, 1, 3 | status |
| `m_valid`, `m_ready`, `m_data`, `m_last` | out/in/out/out | 1/1/16/1 | stream of sums |

The parameters `GOLAY_LEN`, `OVERSAMPLE`, `TX_W`, `FRAME_BITS` and `SUM_W`
default to the values in the table above. `GOLAY_LEN` and `FRAME_BITS/TX_W`
must be powers of two.

Files in `rtl/`: `cotdr_pkg.sv` (constants, state type), `golay_gen.sv`,
`frame_gen.sv`, `trace_accumulator.sv`, `meas_ctrl.sv`, `sum_readout.sv`,
`cotdr_top.sv`.

## Not included

* The SFP transceiver, which is analogue and optical.
* The FPGA serial transceivers and their clocking. These are vendor hard IP.
  Configuring them for 2.5 Gbit/s transmit and 10 Gbit/s receive from a
  common reference is what makes the frames phase-aligned in hardware.
* The processor and its software: correlation, peak fit, and conversion of
  delay to temperature.
* How the sums reach processor memory beyond the stream. The DMA and the
  register map for `start`/`num_traces`/status are left to the system
  integration.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

* `tb_golay_gen`: builds the Golay pair by recursive concatenation and
  checks that it is complementary. It then compares all 512 generated bits
  with it.
* `tb_frame_gen`: checks three whole frames bit by bit (sequence, then zero
  fill), the word counter, and a `frame_start` period of exactly 256 clocks.
* `tb_trace_accumulator`: reduced size. Random samples over 20, 3 and
  1 frames are compared with a model, which also shows that the first frame
  clears the old sums.
* `tb_meas_ctrl`: checks that accumulation starts on a frame boundary and
  lasts exactly *N* x rows. It also checks `acc_first` for one frame only,
  start-while-busy, *N* = 0, and `done` handling.
* `tb_sum_readout`: random back-pressure; checks order, `m_last` and `done`.
* `tb_cotdr_top`: the whole core at its default size. It closes the loop
  through `tb/fiber_loop_model.sv`, a behavioural model of serializer, SFP,
  fiber and slicer. The model's analogue level is the sum of reflections plus
  uniform noise wide enough to linearise the slicer. The reflections sit at a
  reference point and at 4 m, 14 m and 39 m beyond it (a 4 m + 10 m + 25 m
  cascade, about 97.9 slots per meter of fiber). A 3-trace measurement and a
  4000-trace measurement are run. All 16384 sums of both are compared with the
  testbench's own accumulation of the samples it drove. The 4000-trace sums
  are then correlated with the Golay sequence: all four peaks must appear
  within one slot of their delay (plus the one-clock loop latency of core and
  model), and nothing else may come close. It also counts that each
  mechanism actually happened: waiting for a frame boundary, overwriting an
  older measurement, stream stalls, and an ignored start. The test simulates
  in a few seconds.

To run a testbench with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -Irtl -y rtl -y tb +libext+.sv rtl/cotdr_pkg.sv tb/tb_cotdr_top.sv \
  --top-module tb_cotdr_top -o sim
./obj_dir/sim
```

Replace `tb_cotdr_top` with any other testbench name. The fiber model's
delays, amplitudes and noise are parameters of `fiber_loop_model`.

## How far to trust it

The logic is small, and its behaviour is checked exactly against
independent models at full size, so within the interface described here it
should be sound. What it has not been checked against is real hardware: the
bit order and word alignment of real transceivers, and their clocking. The
main divergences from the published instrument are all choices made where
the published description is silent: the frame length, the fill pattern,
which Golay sequence is sent, the memory layout and the readout stream. The
published system's sub-sample timing accuracy comes from the software peak
fit, which is not reproduced here.
