# Real-time frequency measurement with a parallel pipeline FFT

This design measures the carrier frequency of every pulse in a stream of short
microwave pulses, pulse by pulse and without gaps. It is the digital part of a
time-stretched acquisition system. A 10 GSPS, 12-bit converter delivers its
samples as a 40-lane bus at 250 MHz. An external trigger marks where each pulse
starts. The hardware cuts a 440-sample frame (44 ns) at every trigger. It sends
each frame to one of 24 identical spectrum units in turn, so that 24 frames are
in flight at once. Each unit runs a 512-point FFT, takes magnitudes and finds
the strongest bin and its two neighbours. A single shared fitting stage puts a
parabola through those three points, which gives a frequency well below the
20 MHz bin width. The frequencies are then streamed to a host PC. On the way
they pass through a FIFO and a large DDR buffer, which absorb slow or stalled
host reads.

One FFT unit handles one frame per 512 clocks. That is one frame every 2 µs,
while pulses can arrive every 90 ns. The central trick is therefore
distribution: a two-stage parallel-to-serial converter turns the wide sample
bus into 24 serial streams, one per unit, and a collector puts the results back
in frame order.

```
 adc_data[40x12] ─┬─► P2S stage 1 ─► 3 x P2S stage 2 ─► 24 serial lanes
 trigger ─────────┘   (40→8 lanes)    (8→1 lane)            │
                                                24 x spectrum_unit
                                          (pad → FFT 512 → |X| → peak)
                                                             │
                                     result_reorg (frame order)
                                                             │
                                     parabola_fit ──► freq (S16,4)
                                                             │
 capture ─► time_domain_path ─────────────────► path_mux ◄──┘
                                                     │ 16 bit
                                          realtime_transfer
                        FIFO ─ SIPO ─ Encoder ─ DDR ctrl ─ PISO ─► pcie_data[32]
                                                   │
                                          mem_* (DDR controller)
```

All blocks run on one clock, `clk` (250 MHz). The one exception is the write
side of the time path's asynchronous FIFO, which uses `rx_clk`. Resets are
asynchronous and active low.

## Rates that shape the design

| quantity | value | where it comes from |
|---|---|---|
| input | 40 samples x 250 MHz = 10 GSPS | sample bus |
| frame | 440 samples = 11 beats of the bus | trigger window |
| FFT unit throughput | 1 frame per 512 clocks | one sample per clock, padded to 512 |
| 24 units together | 1 frame per 21.3 clocks = 11.7 M frames/s | 24 x 250 MHz / 512 |
| P2S stage 1 | 1 frame per 18.3 clocks | 3 groups x 55 slices |
| result | 16 bits per frame | S16,4 |

The design therefore keeps up with pulses repeating at up to 11.7 MHz.

- **Faster trigger bursts.** Triggers that come faster than one per 21.3 clocks
  are handled for a short burst, because each second-stage FIFO holds one whole
  waiting frame; the frame then waits (stalls) for its unit. A sustained faster
  rate fills the FIFOs, and the overflow flag is set.
- **Triggers during a frame.** A trigger that arrives while a frame is still
  being captured is ignored and counted.
- **The paper's 22 MHz figure.** The paper's requirement is 11 MHz. Its
  hardware experiment quotes 22 MHz, which this arrangement (24 units, one
  sample per clock) cannot sustain.

## Frame distribution: the two-stage P2S

A single demultiplexer from 40 lanes to 24 FIFOs would fan out to 24 x 480
wires. Instead, the distribution is split into 3 x 8.

**Stage 1** (`p2s_stage1`, driven by `trigger_logic`):

- `trigger_logic` samples the trigger once per beat. A rising edge makes that
  beat the first of an 11-beat frame.
- Successive frames go to groups 0, 1, 2, 0, and so on.
- Each group has a 16-deep, 40-lane FIFO: a frame fills 11 entries.
- A PISO cuts each 40-lane word into five 8-lane slices, so each frame becomes
  55 slices.

**Stage 2** (`p2s_stage2`, one per group):

- A counter splits the slice stream into frames of 55.
- Frame j of the group goes to subgroup FIFO j mod 8. These FIFOs are 8 lanes
  wide and 64 deep.
- A subgroup starts sending only when it holds a whole frame and its spectrum
  unit is ready. It then sends all 440 samples on consecutive clocks, lane 0
  first, with `out_first` on the first sample. This is what the streaming FFT
  behind it needs.

Frame k from reset reaches serial lane (k/3 mod 8)·3 + k mod 3. That equals
k mod 24, so the lanes are visited in frame order. This property is what lets
the result collector work with a plain round-robin pointer.

Overflows are reported in a sticky flag, not prevented. A frame that finds its
FIFO full is damaged, and the results after it may be wrong until reset.

## Spectrum unit

`spectrum_unit` chains four blocks. Its latency is 3·512 + 14 = 1550 clocks
from the first sample to the result.

1. **`fft_pad`** passes the 440 samples, shifted left by 3 into 16 bits, and
   then inserts 72 zeros. It is not ready during the zeros, which is why a unit
   can start a new frame only every 512 clocks.
2. **`fft_r2sdf`** is a radix-2, single-delay-feedback FFT with decimation in
   frequency.
   - It has 9 stages. Stage s has a delay line of 256/2^s words, a butterfly
     and a twiddle multiply.
   - Data and twiddles are 16 bits. Twiddles are Q2.14 and are computed with
     `$cos`/`$sin` when the design is elaborated, so no table file is needed.
   - Every stage divides by 2, so the output is X[k]/512 and cannot overflow.
     The price is a noise floor of a few LSB; the testbench allows 4 LSB
     against a double-precision DFT.
   - The bit-reversed output is put back in natural order by a ping-pong buffer
     of 2 x 512 words.
   - Latency from the first input to bin 0 is 1033 clocks.
3. **`mag_calc`** computes the magnitude.
   - It squares and sums in 33-bit fixed point.
   - It converts the sum to IEEE single precision and takes the square root:
     the integer square root of the mantissa, with the exponent halved.
   - It converts the magnitude back to unsigned fixed point with 8 fraction
     bits. Both forms leave the block: the fixed-point one for comparing, the
     float for fitting.
   - Latency is 4 clocks.
4. **`peak_detect`** scans bins 1..255, the positive frequencies without DC.
   - It keeps the first largest bin x0 and its fp32 magnitude y0, using the
     fixed-point value for the compare.
   - Two register pairs hold the magnitudes of bins x0−1 and x0+1. The x0−1
     value is the previous bin, saved whenever the maximum moves. The x0+1
     value is taken from the bin that follows the new maximum.
   - The record {y−1, y0, y+1, x0} (`fm_pkg::peak_t`) leaves one clock after
     the last bin.

`pipeline_fft` is 24 of these units side by side.

## Back in order, and the parabolic fit

`result_reorg` holds each unit's latest record. A pointer waits at lane 0 until
its record is there, forwards it, then moves to lane 1, and so on. Because
frame k ran on lane k mod 24, the records leave in frame order. A lane that
produces a second record before the first was taken sets `overflow`; at the
design's rates this does not happen.

`parabola_fit` puts a parabola y = a·u² + b·u + c through the points
(−1, y−1), (0, y0) and (+1, y+1), where u = x − x0. This gives 2a = y+1 + y−1 − 2y0 and
b = (y+1 − y−1)/2. The vertex is therefore at

    xc = x0 + (y+1 − y−1) / (2·(2·y0 − y+1 − y−1))

The paper's printed closed form for xc does not follow from its own a and b.
Its fitting diagram (one adder forms the difference, which is halved; another
forms the sum, from which 2y0 is subtracted) does follow, and that is what is
built.

How the block computes it:

- **Alignment.** The three fp32 magnitudes are aligned to the largest of their
  exponents, which gives 24-bit integers on a common scale; the ratio does not
  depend on the scale.
- **Division.** A restoring divider forms the offset to 12 fraction bits. The
  offset is limited to ±1 bin. A flat peak gives 0.
- **Output.** The result is `xc · BIN_MULT` as a signed 16-bit number with 4
  fraction bits (S16,4). The bin width is Fs/N = 10 GHz/512, rounded to
  20 MHz, and `BIN_MULT` = 10, so one output unit is 2 MHz. 4 GHz then reads as
  2000.0 and fits S16,4; a 1 MHz unit would not fit. The output saturates at
  32767, about 4096 MHz.
- **Timing.** Five pipeline stages, one result per clock.

In the end-to-end test, tones placed anywhere in bins 3..200 come out within
25 output units (3.1 MHz, 0.16 bin) of their true frequency. That is the accuracy the
parabola itself allows for a rectangular window of 440 samples in 512.

## Real-time transfer

The host reads data in frames. Between reads it may be late by milliseconds,
rarely by seconds. Meanwhile the results keep arriving at 2 bytes per frame
time. `realtime_transfer` puts two caches in series.

**FIFO (`xfer_fifo`).**

- Results are written 16 bits at a time and packed four to a 64-bit entry,
  the first result in the low bits.
- There are 65536 entries (512 KiB). That is enough for the roughly 440 kB
  that arrive while the DDR is busy sending a 5 ms frame.
- `prog_full` rises at one block: 81920 results, 20480 entries.

**Block move.** `state_ctrl` sees ReadBlock Ready and issues WriteBlock Start.

- `ddr_ctrl` raises WriteBlock Ready.
- `fifo_ctrl` then reads exactly one block, only while the SIPO can take it.
- The block passes through the SIPO (8 bytes to 40) and the encoder (a byte
  gearbox from 40 bytes to 60, the DDR word) and is written to the DDR at
  consecutive word addresses. The addresses wrap after `DDR_DEPTH` words.
- When the FIFO side has pulsed ReadBlock Done and the SIPO and encoder hold no
  whole word, `ddr_ctrl` pulses WriteBlock Done. Bytes that do not fill a
  60-byte word wait in the encoder for the next block, so the DDR holds one
  continuous byte stream.

**Frame read.**

- ReadFrame Ready is high while the DDR holds at least one frame of unread
  words. A frame is 20 blocks, that is 20·81920·2/60 = 54613 whole words.
- When the host has acknowledged the previous frame with `read_done`,
  `state_ctrl` issues ReadFrame Start.
- `ddr_ctrl` reads one word at a time, with one read in flight, and only when
  the output PISO is empty. The PISO sends 60 bytes as fifteen 4-byte words on
  `pcie_*`.

**Priorities and recovery.**

- Block moves win over frame reads, so the FIFO is never kept waiting behind a
  frame.
- The DDR never reads and writes at the same time; an assertion checks this.
- After a host stall, stored frames are read back to back as soon as each
  `read_done` arrives.
- If the host is faster than the data, the controller waits for more blocks
  and counts a catch-up wait.
- If the DDR is full, new words are dropped and `overflow[4]` is set. This
  takes 2·10⁹ bytes, more than a minute of one module's data.

The user side of a memory controller is a plain command port, and the
controller itself is outside this design.

- **Commands.** `mem_wr_en` or `mem_rd_en` is accepted on a clock where
  `mem_rdy` is high.
- **Read data.** Read data comes back on `mem_rd_valid`, in command order, with
  any latency.

## Time-domain (oscilloscope) path and the mode switch

`time_domain_path` carries the sample bus on the beats selected by `capture`.
The trigger module that drives `capture` is outside this design.

1. The beats go into a 16-entry asynchronous FIFO (Gray-coded pointers) in the
   `rx_clk` domain.
2. On `clk`, a PISO serialises each 40-lane word, lane 0 first, one sample per
   clock.
3. A decimator keeps one sample in `decim`.
4. A 1024-entry FIFO holds the kept samples, sign-extended to 16 bits.

The path can sustain 40 samples per 40 clocks. A capture window longer than
that rate allows overflows the asynchronous FIFO: beats are dropped and
`overflow[2]` is set.

`path_mux` (`mode_sel`: 0 = frequency, 1 = oscilloscope) chooses which 16-bit
stream enters the transfer path. The time path is drained only while it is
selected. Frequency results that appear while the oscilloscope is selected are
not stored. Switch modes when the path that is being left has gone quiet.

## Top level: `freq_meas_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | processing clock, async reset |
| `adc_valid`, `adc_data` | in | 1, 480 | 40 lanes of S12 samples, lane 0 earliest |
| `trigger` | in | 1 | rising edge starts a frame |
| `rx_clk`, `rx_rst_n`, `capture`, `decim` | in | 1,1,1,16 | time path |
| `mode_sel` | in | 1 | 0 frequency, 1 oscilloscope |
| `start_measure`, `read_done` | in | 1 | host commands |
| `mem_*` | | 25-bit addr, 480-bit data | DDR controller user side |
| `pcie_valid/data/ready` | out/out/in | 1, 32, 1 | stream to the PCIE interface |
| `freq_valid`, `freq` | out | 1, 16 | frequency result, S16,4, 2 MHz units |
| `frames_captured`, `missed_triggers` | out | 32, 16 | trigger statistics |
| `blocks_moved`, `frames_sent`, `catchup_waits` | out | 32 | transfer statistics |
| `overflow` | out | 5 | sticky {DDR, transfer FIFO, time path, reorder, P2S} |

In this top the receiver is assumed to deliver the sample bus on `clk`. The
time path's `rx_clk` only matters when the receiver clock differs. A frame's
frequency leaves about 1.6k clocks after its trigger.

Main parameters (defaults in brackets):

- frame distribution: `LANES` [40], `GROUPS` [3], `SUBS` [8], `FRAME` [440],
  `N` [512];
- fitting: `BIN_MULT` [10];
- transfer: `BLOCK_PTS` [81920], `FRAME_BLOCKS` [20], `XFIFO_DEPTH` [65536],
  `DDR_AW` [25], `DDR_DEPTH` [2^25 words of 60 bytes in 64-byte slots].

Shared constants and types, including the fp32 helpers, are in `fm_pkg`.

## Where this departs from the paper, or fills gaps

- **Parabola formula.** The printed formula is not used; the datapath of the
  fitting diagram and the textbook vertex are used instead (see above).
- **Frame size conflict.** The paper calls a frame "20 blocks of 160 kB" and
  also "2.5 MB". These disagree: 20 x 160 kB = 3.2 MB. The 20 blocks of 80 Ki
  results are followed. With `FRAME_BLOCKS` = 16 a frame is exactly 2.5 MiB,
  which fits a 2.5 MB host buffer; the default does not.
- **DDR size conflict.** The DDR is 2 GByte in the transfer section and 4 GByte
  per board elsewhere; 2 GByte is used.
- **Position of the path multiplexer.** The system block diagram draws the
  multiplexer after the frequency path's own FIFO and DDR, feeding a separate
  transfer board with another FIFO, DDR and the PCIE core. The text says the
  data transfer module carries the waveform data when the time path is
  selected. Here the multiplexer sits in front of the one transfer path, so
  waveform data are buffered the same way; the second board is not built.
- **Fitting diagram.** It draws the final combining operator with the same
  symbol as its multipliers; it is read as the division b/(2a).
- **Repetition rate.** See above: 11.7 MHz is sustained, 22 MHz is not.
- **Choices of this design where the paper is silent:**
  - FFT scaling, rounding and output reordering;
  - the fp32 square-root method;
  - fixed-point widths for magnitude comparison and fitting;
  - the search range 1..255 and tie rule;
  - the P2S whole-frame start rule and ready handshake;
  - the round-robin result collector;
  - the FIFO packing order and the 40→60 byte gearbox;
  - one outstanding DDR read;
  - drop-on-full overflow handling;
  - the transfer priority rule;
  - the time path's FIFO sizes and decimator;
  - the 2 MHz output unit.
- **Not built.** The analog front end, the converter, the serial receiver, the
  time-path trigger module, the DDR memory controller and DRAM, the PCIE core
  and the host are not part of the RTL. Their user-side signals are ports of
  the top.

## Verification

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog. Reference
values are computed independently in the testbench: a double-precision DFT for
the FFT, exact real arithmetic for the magnitude and the fit, and byte-stream
models for the transfer blocks. `tb/tb_ddr_model.sv` is a behavioural memory
with random `mem_rdy` stalls and fixed read latency, used by the transfer
tests.

Two tests cover the whole design:

- **`tb_freq_meas_top`** runs the full frequency path with reduced transfer
  sizes: blocks of 120 results, frames of 2 blocks, a 128-entry FIFO and a
  256-word DDR.
  - It sends 358 triggered tone frames. Each result is checked against its
    tone.
  - It also drives trigger edges inside frames, a trigger burst faster than
    the units can take (the frames stall and still come out right), two
    switches to the oscilloscope path with decimation 3 and 2 and back, and
    host stalls that force catch-up reads.
  - It ends by overloading the design until the P2S, the time path and the DDR
    all report overflow.
  - It counts every one of these events and fails if one never happened.
  - It checks the 4-byte output stream word by word against the multiplexer's
    output.
- **`tb_freq_meas_top_full`** runs the top with every parameter at its default.
  - It sends 120 frames at the full rate, checking each frequency, and a missed
    trigger.
  - It then switches to the oscilloscope until one complete 81920-result block
    has gone through the FIFO, SIPO and encoder into the DDR: exactly 2730
    words, with the first and last checked.
  - It does not read a full-size frame back: that needs 20 blocks, about
    3.4 M clocks, which is too long to simulate here. The frame read is covered
    at reduced size by `tb_freq_meas_top` and `tb_realtime_transfer`.

Each testbench is built and run with plain Verilator from the repository
root, for example:

```
verilator --binary --timing --assert -Wno-fatal \
  --top-module tb_freq_meas_top rtl/fm_pkg.sv -y rtl -y tb tb/tb_freq_meas_top.sv
obj_dir/Vtb_freq_meas_top
```

The testbenches also pass when every register and memory starts with random
contents (Verilator's `--x-assign unique --x-initial unique` with
`+verilator+rand+reset+2`). For that reason the FFT delay lines keep their
valid flags in reset registers beside the data memory.

The end-to-end test takes about a minute. The full-size test takes about as
long; most of that is the 24 FFT units.

Known limits:

- The floating-point helpers truncate rather than round.
- Overflow anywhere is only flagged; data after an overflow is not trusted.
- The design has been simulated but not timed on an FPGA. The single-cycle
  fp32 conversion and square root in `mag_calc` would need more pipeline
  stages to reach 250 MHz.
