# RF-ICE readout firmware in SystemVerilog

A microwave kinetic inductance detector (MKID) is a superconducting resonator
whose resonance shifts when light is absorbed. Thousands of them share one
coaxial line, each at its own frequency. One probe tone (a "carrier") sits on
each resonance, and the detector signal is the change in amplitude and phase
of the transmitted tone. The readout electronics must therefore:

1. synthesise up to 1024 tones anywhere in a 500 MHz band, each with its own
   frequency and amplitude;
2. digitise the returning comb and demodulate every tone down to a slow
   complex time stream;
3. decimate these streams, timestamp them and send them to a computer.

This repository is RTL for the FPGA part of such a readout. One board carries
two such combs (2048 channels). The converters run at 500 MSPS complex.

The central idea is to use a polyphase filter bank (PFB) in both directions.
- **Demodulation in two steps.** An oversampled PFB first splits the 500 MHz
  band into 512 overlapping subbands of about 2 MSPS each. Each detector
  channel then picks the subband nearest its tone and removes the remaining
  offset with its own digital oscillator (DDS).
- **Synthesis in reverse.** Each channel makes its tone as a 2 MSPS baseband
  sample. The samples are placed into subbands, and a synthesis PFB turns
  the subbands into the 500 MSPS DAC stream.

Because every tone exists only as a slow per-channel sample, its frequency and
amplitude can change on every sample. That is what makes feedback possible:
the "nuller" loop drives a second DAC with a signal computed from the
demodulated channel.

## Block diagram

```
                 +-------------------- readout_comb (x2) -----------------------------+
ADC 500 MSPS --> | input_mux --> pfb_downconverter -------> baseband_processor x 8     |
  carrier DAC -->|   ^  ^        (band-shaping filter,       (128 channels each)        |
  nuller DAC  -->|   |  |         512-pt FFT,                 DDS, down-mix,            |
   (loopback)    |   |  |         bin->channel turn)          feedback loop, up-mix,    |
                 |   |  |                                     CIC1 /64, CIC2 /R,        |
                 |   |  |                                     packetizer, carrier       |
                 |   |  +---- pfb_upconverter (nuller)  <---- nuller samples            |
                 |   +------- pfb_upconverter (carrier) <---- carrier samples           |
                 |             (channel->bin turn, 512-pt inverse FFT,                  |
                 |              synthesis band-shaping filter) --> DAC streams          |
                 +------------------------------------------------------------------- --+
control bus --> control_interface --> channel tables, mode registers (all combs)
packets of 2 combs x 8 blocks --> ethernet_tx --> byte-wide 1 Gb/s PHY interface
```

`rfice_top` holds the control interface, `NCOMB_P` = 2 readout combs and the
Ethernet transmitter. Some parts sit outside the RTL:
- the converter serial links (JESD204B) and the converter chip with its
  6 GSPS sampling and on-chip mixing;
- the Ethernet PHY;
- the IRIG-B time decoder;
- the control processor.

Their data appears at the top-level ports: 16-bit complex sample streams, a
byte interface, a 64-bit time value and a simple register bus.

## Timing: one clock, one point per cycle

Everything runs on one clock, and the whole datapath is organised around the
subband frame:
- The FFT is a streaming pipeline that takes one complex point per clock, so
  a 512-point frame takes `M` = 512 clocks.
- The PFB is 2x oversampled. Consecutive frames overlap by half, so each
  frame brings in `HOP = M/2` = 256 new converter samples.
- ADC and DAC samples therefore move at one sample per two clocks. Both are
  valid-qualified streams.
- At the real 500 MSPS this corresponds to a 1 GHz processing clock. Another
  clock just scales all rates, since nothing in the logic depends on the
  absolute frequency.
- Each frame yields one sample for every subband. The subband rate is
  500 MSPS / 256 ≈ 1.953 MSPS, and the subbands are spaced 500 MHz / 512 =
  976.5625 kHz apart.
- A baseband block handles its 128 channels in 128 consecutive clocks of
  every 512. The 8 blocks of a comb work in parallel.

The published firmware instead runs its baseband logic on a 250 MHz DSP clock
with several samples in parallel. This design keeps the same work per
converter sample but does it serially. That is the largest organisational
difference from the original. It makes the RTL much smaller and easier to
follow, at the cost of a clock four times faster than the published one.

The whole chain is self-timed by valid strobes:
- The analysis filter starts a frame as soon as enough input samples exist.
- Every later block reacts to the frame and sample strobes of the one before.
- The synthesis side is paced by the baseband samples, and those are paced
  by the analysis frames.

## Analysis filter bank (`pfb_analysis_filter`, `fft_r2sdf`, `corner_turn_b2c`)

**Band-shaping filter.** The prototype low-pass filter `h` has `TAPS*M` =
2048 coefficients:

    h[n] = sinc(n/M - TAPS/2) * (0.5 - 0.5 cos(2 pi n / (TAPS*M)))

They are quantised to 18 bits (Q1.17) and computed while the design is
elaborated, so there is no table file. For a frame starting at input index
`n0`, the filter forms

    v[m] = sum_{t<TAPS} x[n0 + m + t*M] * h[m + t*M],   m = 0..M-1

This is a windowed sum of 4 samples spaced 512 apart. The next frame starts
256 samples later. The input memory holds `TAPS+1` banks of `M` samples, so
new samples can arrive while the oldest bank is still being read. When the
memory is full, `in_ready` drops.

**Time-referenced rotation.** A frame that starts at `n0` is written out
circularly rotated by `n0 mod M`. With a hop of half a frame, consecutive
frames would otherwise alternate the phase of every odd subband. The rotation
gives every subband sample the same absolute time reference, so a steady tone
gives a steady subband phasor.

**FFT.** The FFT is a radix-2 single-path delay-feedback pipeline with 9
stages for 512 points:
- Each stage halves its result, so the output is the DFT divided by 512 and
  cannot overflow 24 bits.
- Twiddles are cosine and sine constants computed at elaboration.
- The output comes in bit-reversed order with the bin number attached.
- Setting `INVERSE` conjugates the twiddles, giving the inverse transform
  used for synthesis.

**Bin-to-channel corner turn.** Each channel of each block has a programmable
subband number (table `TBL_BIN`).
- The corner turn stores a whole FFT frame. It is double-buffered, so the
  next frame can arrive while this one is read.
- It then reads out channel `c` of all 8 blocks together, one channel per
  clock, taking each channel's assigned subband.

Because the PFB overlaps its subbands, a tone always lies within ±0.5 spacing
of some subband centre; that nearest subband is the one to assign.

## Channel processing (`baseband_processor`)

Each block handles 128 channels one after another. All per-channel state
lives in memories indexed by the channel number. For the sample `x` of
channel `c`:

| step | operation |
|---|---|
| DDS | `LO = exp(j*phase[c])`, with `phase[c] += freq[c]` every frame (32-bit accumulator, 1024-entry sine table, Q1.17) |
| down-mix | `d = x * conj(LO)` |
| feedback loop | `y[c] <- sat(y[c] + (G[c]*d) >> 16)`, gain `G` signed Q2.16 |
| nuller | `n = y[c] * LO`, sent to the nuller synthesiser |
| carrier | `LO * A[c] >> 11`, `A` unsigned 16 bit, sent to the carrier synthesiser |
| science select | `d` (normal) or `y` (loop output), per comb |
| CIC1 | order 3, decimate by 64 |
| CIC2 | order 3, decimate by `R` = 1, 2, ..., 64 (per comb, changeable at run time) |
| packetizer | one packet of 128 I/Q pairs per CIC2 output |

**Frequency word.** A subband sample arrives every 256 converter samples,
but the subbands are spaced by 500 MHz / 512. A tone `δ` subband spacings
above its subband centre therefore turns by `π·δ` radians per subband
sample, not `2π·δ`. To track it, set the frequency word to
`round(δ/2 · 2^32)`.

The same phase serves the down-mix and both up-mixes. A channel's carrier,
nuller and demodulator are therefore phase-coherent by construction.

**Changing settings.** Writing a channel's frequency resets its phase. Writing
its loop gain clears its loop state.

**CIC gain.** The CIC gain `R^3` is removed by a shift of `3·log2 R`, so the
science value of a steady tone does not depend on `R`. A rate change restarts
the decimation phase; the samples already in the integrators stay.

There is no droop-compensation filter: like the original firmware, this design
leaves it to later processing.

## Synthesis filter bank (`pfb_upconverter`)

**Channel-to-bin corner turn.** Each block delivers one carrier (or nuller)
sample per channel per frame.
- The sample is added into the subband assigned to its channel. Channels
  that share a subband simply add.
- Accumulators are double-buffered. Once the last channel of a frame is in,
  the 512 subbands are read out in order, and each entry is cleared as it is
  read.

The inverse FFT of these subbands feeds the synthesis filter. It keeps the
last `2·TAPS+1` frames `v_F` and produces 256 output samples per frame:

    y[F*HOP + r] = sum_{j<2*TAPS} h[r + j*HOP] * v_{F-j}[(r + j*HOP) mod M],   r = 0..HOP-1

This is the same windowed overlap-add the analysis bank undoes. It uses the
same prototype filter, and the result is saturated to 16 bits. A carrier of
amplitude `A` on a subband centre gives a DAC tone of roughly
`2·A/M · 2^6` counts.

**Phase of synthesised tones.** The synthesis uses the same absolute-time
rotation as the analysis side. So a tone written into subband `k` with offset
`δ`, analysed through a loopback, comes back in subband `k` with the same `δ`.

## Input multiplexer and loopback timing (`input_mux`)

A comb analyses one of three inputs: its ADC, its carrier DAC stream or its
nuller DAC stream. The loopbacks test the whole signal path without analog
hardware.

**Pacing.** In a loopback the synthesiser's output depends on analysis frames
that depend on the synthesiser's output. So the multiplexer always takes its
timing from the ADC sample strobe, as the real converters share one clock:
- On every ADC strobe it passes one sample on to the analysis filter.
- In loopback modes that sample comes from an elastic buffer, 512 samples
  deep. The buffer absorbs the synthesiser's bursts of 256 samples per frame.
- After a mode change the buffer refills to 128 samples before it is read.
  Until then, zeros are analysed.

**Error counters.**
- Underruns count in `in_slip_count`.
- Samples that find the buffer full or the analysis filter busy count in
  `in_drop_count`.

Neither happens in steady operation.

## Control registers (`control_interface`)

The bus is synchronous: single-cycle writes, read data one clock after
`bus_rd`. Byte addresses:

| address | register |
|---|---|
| `0x000F00` | identification, reads `0x52464943` |
| `comb*0x100 + 0x00` | input: 0 ADC, 1 carrier loopback, 2 nuller loopback |
| `comb*0x100 + 0x04` | science source: 0 down-mixed signal, 1 feedback-loop output |
| `comb*0x100 + 0x08` | CIC2 rate as log2 R, 0..6 (larger values read as 6) |
| `0x100000 + table<<18 + comb<<14 + chan<<2` | channel table write, `chan` = block*128 + channel |

Tables: 0 frequency word, 1 carrier amplitude, 2 subband number, 3 loop gain.
A table write is broadcast on the `cfg` record, and each block picks out its
own channels.

## Packets and Ethernet framing (`packetizer`, `ethernet_tx`)

**Packets.** Every CIC2 output of a block (128 channels) becomes one packet of
32-bit words:

| word | content |
|---|---|
| 0 | `0x52464943` |
| 1 | comb[31:24], block[23:16], log2 R[10:8], channel count[7:0] |
| 2 | sequence number |
| 3, 4 | timestamp (high, low) |
| 5 | packets dropped so far |
| 6... | I, Q of each channel (24-bit values sign-extended) |

The timestamp is sampled when the block's first channel of the set arrives.

**Slots and drops.** Each block has two packet slots. If both are full when a
new set starts, the whole set is dropped and counted.

**Ethernet frames.** The transmitter takes packets from the 16 blocks in
round-robin order. Each packet becomes one Ethernet frame:
- preamble, SFD;
- broadcast destination, fixed source MAC, EtherType `0x88B5`;
- payload big-endian;
- CRC-32, then a 12-byte gap.

It emits one byte per `gmii_byte_en`, and counts frames in `frame_count`.

**Capacity.** A full packet is 1048 bytes of payload. At R = 1 one board
produces 16 × 30.5 k packets/s ≈ 530 MB/s, far above the 125 MB/s of gigabit
Ethernet. With both combs fully used, rates of R ≥ 8 (66 MB/s) fit. At lower
R, packets are dropped and counted rather than stalling the signal path.

## Numbers and formats

| quantity | format |
|---|---|
| converter samples | 16-bit I and Q |
| internal baseband signals | 24-bit I and Q |
| filter, twiddle and LO coefficients | 18-bit Q1.17 |
| DDS phase | 32 bits (top 10 address the sine table) |
| loop gain | 18-bit Q2.16 |
| carrier amplitude | 16 bits, unsigned |
| CIC integrators | 24 + 18 bits |

Parameters default to the sizes of the published system:
- `M` = 512 subbands;
- `NCH_P` = 128 channels per block;
- `NBLK_P` = 8 blocks;
- `NCOMB_P` = 2 combs.

`TAPS_P` = 4 (prototype length / `M`) and the CIC order of 3 are this
design's choices.

## What follows the published design and what does not

Taken from the original:
- the block structure of the signal path:
  - input multiplexer with two loopbacks;
  - 2x oversampled PFB downconverter;
  - 8 blocks of 128 channels, each with DDS down-mix, feedback loop, LO
    up-mix, CIC1 /64, CIC2 /R (R = 1..64) and packetizer;
  - static-amplitude carrier;
  - separate carrier and nuller synthesisers;
- 512 subbands with a hop of 256;
- 24-bit baseband and 16-bit converter widths;
- timestamped packets per block, merged onto one 1 Gb/s link.

This design's own choices, where the original gives none:
- the single processing clock;
- the prototype filter (sinc with Hann window, 4 taps per branch);
- the FFT architecture and its scaling;
- all fixed-point formats beyond the 24/16-bit widths;
- the CIC order;
- the shared DDS phase for down- and up-mix;
- the feedback loop as a plain integrator with a programmable gain;
- the loopback pacing;
- the register map;
- the packet layout;
- raw Ethernet framing (no IP/UDP).

Not built: the JESD204B links, the converter chip, the Ethernet PHY, the
IRIG-B decoder, the control processor and its software, and the analog chain.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Each compares against independently computed
values:

| testbench | checked against |
|---|---|
| `tb_fft_r2sdf` | direct DFT, forward and inverse, including latency |
| `tb_pfb_analysis_filter` | exact model of the windowed sum and rotation, with back-pressure and frame-rate checks |
| `tb_cic_decimator` | equivalent FIR model for several R and a rate switch |
| `tb_packetizer` | packet contents and drops |
| `tb_ethernet_tx` | CRC-32 and frame layout |
| `tb_input_mux` | loopback pacing, priming, underrun and overflow |
| the rest | similar per-block checks |

Three testbenches exercise the full signal path:
- `tb_pfb_downconverter` and `tb_pfb_upconverter` check tone placement at
  reduced size.
- `tb_readout_comb` runs one reduced comb in carrier loopback and in ADC mode.
- `tb_rfice_top` runs two reduced combs end to end through the Ethernet
  bytes. It covers:
  - carrier loopback and ADC tone tracking;
  - a CIC2 rate switch;
  - packet overflow with the link stalled;
  - nuller loopback with the feedback loop as science source.

  It counts each of these mechanisms and fails if one never happened.

`tb_rfice_top_full` runs the top at its default size (2 × 1024 channels,
512 subbands). It takes about 1.5 million clocks, which is under a minute with
Verilator. It checks:
- an ADC tone tracked by channel 300 of comb 0;
- a carrier loopback on channel 1000 of comb 1;
- packet spacing of exactly 8 × 64 frames at R = 8;
- CRC and headers of every frame;
- that nothing is dropped.

To run a testbench with Verilator (modules are found by file name):

    verilator --binary --timing -Irtl -y rtl rtl/rfice_pkg.sv tb/tb_rfice_top_full.sv \
              --top-module tb_rfice_top_full -o sim && ./obj_dir/sim

Known limits:
- A generic gate-level synthesis of the complete two-comb top is large. The
  frame and channel memories are plain arrays meant for block RAM, and they
  become flip-flops when no RAM mapping is available.
- The FFT tests allow up to 200 LSB of rounding error on coherent full-scale
  tones. Error from the 1/2 per stage scaling adds up over 9 stages.
