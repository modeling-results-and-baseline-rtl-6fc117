# Oversampled channeliser and phase readout for MKID arrays

A Microwave Kinetic Inductance Detector (MKID) is a superconducting resonator that also
senses light: a photon that hits it shifts its resonant frequency for a few microseconds.
Thousands of MKIDs with slightly different resonant frequencies share one feedline. The
readout drives the feedline with a comb of probe tones, one tone on each resonator. It then
digitises what comes back and tracks the phase of every tone, about a million times per
second. A photon shows up as a short step in the phase of one tone.

This RTL is the programmable-logic part of such a readout, for a board with fast on-chip
converters. For each feedline it:

1. plays a stored comb of up to 2,000 tones to an I/Q DAC pair;
2. splits the returning I/Q stream from an ADC pair into 4,096 overlapping frequency bins
   with a polyphase filter bank that is oversampled by 32/27;
3. picks the 2,000 bins that hold tones and turns each one into a channel;
4. removes each channel's known phase rotation with a per-channel oscillator, so each tone
   ends up at 0 Hz;
5. low-pass filters each channel, converts it to a phase, and records the phase for the host.

Two feedlines are built by default, for 4,000 detectors in total.

```
            host writes (cfg_*)                                   host reads (rec_rd_*)
                 |                                                        ^
   +-------------+--------------+-----------------+----------------+      |
   v             v              v                 v                v      |
dac_lut   pfb_fir coefficients  channel map   oscillator incs             |
   |                                                                       |
   v  DAC I/Q      ADC I/Q                                                 |
 (out) ...RF loop...  --> pfb_fir --> fft_sdf --> channel_select --> dds --> ddc --> lpf --> phase_recorder
                         8 taps,      4096 bins    2000 channels     per-channel   1-pole   CORDIC phase,
                         hop 3456     bit-rev.     (copies allowed)  NCO + mixer   IIR      record memory
```

## Why the filter bank is oversampled

An FFT of consecutive blocks gives bins that do not overlap well. A tone halfway between two
bin centres loses about 6 dB. This loss is called scalloping, and at the low probe powers used
for MKIDs it costs signal-to-noise. A polyphase filter bank (PFB) first weights a longer
stretch of input, `TAPS` blocks of `N` samples, with a window. It then folds the result into
one block of `N` and takes the FFT. Here the window is a Hamming-weighted sinc. Making its bins
wider (the sinc is scaled by 32/27) fills the dips between bins. But wider bins alias unless
frames come faster. So a new frame starts every `HOP = N*27/32 = 3456` input samples instead
of every 4096. That costs 32/27 more processing, far less than the usual factor of 2.

`pfb_fir` computes, for frame `k` starting at input sample `s = k*HOP`,

```
y[n] = sum_{m=0}^{TAPS-1} h[n + m*N] * x[s + n + m*N],      n = 0 .. N-1
```

Input samples go into a circular buffer of `TAPS+1` banks of `N` samples each. A frame starts
as soon as `TAPS*N` samples after its start are present. The spare bank lets the next `HOP`
samples arrive while the frame is being read. Each clock, every bank is read at the same
offset `(start + n) mod N`. The bank outputs are then rotated so that tap `m` comes from bank
`start_bank + carry + m`. Here `carry` is set when `start_offset + n` passes `N`. One
windowed sample leaves per clock, so a frame takes `N` clocks. In that time only `HOP` new
samples are needed. The ADC port therefore accepts at most 27/32 of a sample per clock, and
`in_ready` (top-level `adc_ready`) applies back-pressure when the buffer is full. Once
throttled, frames follow each other every `N` clocks with no gap.

The coefficients are a memory written by the host, in Q1.17. The test benches use

```
h[i] = (0.54 - 0.46 cos(2 pi i/(TAPS*N-1))) * sinc((i - TAPS*N/2 + 0.5)/N * 32/27) * 131000
```

With 8 taps this gives a centred tone and a tone exactly on a bin edge within 1.45 dB of each
other. This was measured on the full-size design; a critically sampled 4-tap bank loses about
6 dB there.

## Why each channel's phase turns, and how it is undone

A tone at `f` (in cycles per sample) advances its phase by `f * HOP` turns from one frame to
the next. With critical sampling (`HOP = N`) and a tone at a bin centre (`f = k/N`), that is a
whole number of turns, and the bin's phase stands still. With `HOP = 3456` even a bin-centred
tone turns by `frac(k * 27/32)` of a turn per frame. That amount differs from bin to bin. A
tone that is off the bin centre by `d` bins adds its own rotation. Both are known once the
tone frequencies are chosen, so `dds` keeps one phase accumulator per channel and the host
programs

```
inc[c] = frac((k_c + d_c) * HOP / N) * 2^32         (signed, in [-0.5, 0.5) turn)
```

Every time channel `c` passes (once per frame), the oscillator returns `cos/sin` of its
accumulator and adds `inc[c]`. `ddc` multiplies the sample by `cos - j sin`. The tone is then
at 0 Hz and its phase stays constant until a photon moves it. Writing an increment also
clears that channel's accumulator.

Example at full size: a tone in bin 500, exactly at the bin centre, turns by
`frac(500*3456/4096) = 0.875` turn per frame if left uncorrected. The end-to-end test checks
this on a channel whose increment is zero. It also checks that the corrected channels keep
their phase within 0.6 degrees.

The bins are about 0.98 MHz apart and overlap, so one bin may hold two tones. `channel_select`
then copies that bin to two channels, and each channel's oscillator is tuned to one of the
two tones. The other tone stays as a residual that turns quickly, and the low-pass filter
reduces it. Bins that hold no tone are simply not named in the channel map.

## Blocks

| module | what it does | latency / rate |
|---|---|---|
| `mkid_pkg` | `cplx_t` (two signed 16-bit halves, `re` in the upper half), quarter-wave cosine table (1,024 entries, Q1.15), `sincos()` of a 12-bit phase, rounding complex multiply, the host register regions | - |
| `dac_lut` | waveform memory, `DEPTH` = 65,536 complex samples, replayed from 0 to `play_len-1` while `run` is set | 1 sample/clock, 1 clock |
| `pfb_fir` | window and fold, see above | 1 out/clock, 3 clocks after the read of offset `n` |
| `fft_sdf` | radix-2 single-path delay-feedback FFT, `log2(N)` stages, each stage scales by 1/2 (output = DFT/N), bins leave in bit-reversed order tagged with `out_bin` | advances only on `in_valid`; sample `t` reaches the output on valid beat `t + N + log2(N) - 2` |
| `channel_select` | double-buffered frame memory (2 x N); after a frame's last bin it emits `NCHAN` channels, channel `c` = bin `map[c]` | 1 channel/clock, first channel 3 clocks after the frame's last bin |
| `dds` | `NCHAN` phase increments and accumulators (32 bits), table lookup on the top 12 bits; carries the sample along | 2 clocks |
| `ddc` | `in * conj(lo)`, rounded and saturated to 16 bits | 1 clock |
| `lpf` | per-channel `y += (x - y) >> SHIFT` (SHIFT = 2), state with 8 extra fraction bits; clears all states during the `NCHAN` clocks after reset, dropping input meanwhile | 1 clock |
| `cordic_phase` | 16-iteration vectoring CORDIC, input scaled by 2^4, angle in 2^-16 turn | 17 clocks |
| `phase_recorder` | CORDIC, then `{channel, phase}` into a circular record of 65,536 words; `wr_count` counts words written | host read: 1 clock |
| `mkid_readout_top` | `NFEED` copies of the chain plus control registers | - |

Every channel-rate block passes along the channel number and a frame-end flag (`*_last`).
The top level exports `frame_done`, which pulses when the last channel of a frame leaves the
low-pass filter.

## Host programming model

All writes go through `cfg_we`, `cfg_feed` (which feedline), `cfg_region`, `cfg_addr` and
`cfg_data`:

| `cfg_region` | `cfg_addr` | `cfg_data` |
|---|---|---|
| `CFG_CTRL` (0) | 0: DAC loop length; 1: bit 0 = DAC run | value |
| `CFG_DAC_LUT` (1) | sample index | `{re[15:0], im[15:0]}` |
| `CFG_PFB_COEF` (2) | `m*N + n` | coefficient, Q1.17 in bits 17:0 |
| `CFG_CHAN_MAP` (3) | channel | FFT bin (natural numbering; negative frequencies are bins `N/2..N-1`) |
| `CFG_DDS_INC` (4) | channel | phase increment per frame, 2^32 per turn |

A tone is periodic in the DAC loop only if `f * play_len` is a whole number. With
`play_len = 65536` and `N = 4096`, tones therefore sit on a grid of 1/16 bin. The phase
record is read through `rec_rd_addr`/`rec_rd_data` (one clock). Word `i` holds
`{channel, phase}`, and channels appear in order 0..NCHAN-1 in each frame.

## Fixed point

Samples are 16-bit two's complement throughout. Converter samples (12 or 14 bits, see
below) sit in the upper bits. The PFB accumulates at full width and then rounds by 2^-17 and
saturates. The FFT halves the data at each stage, so a full-scale tone in one bin comes out
at its input amplitude times the window gain. The FFT requires complex inputs inside the
circle of radius 32767. A sample in a corner of the I/Q square, with both parts near full
scale, can saturate in a twiddle rotation. Probe combs are kept far below that level. Twiddle factors and
oscillator values are Q1.15. A factor of exactly 1 skips the multiply. The CORDIC resolves
the angle to about 2^-16 turn for vectors above a few hundred counts.

## Throughput: what this RTL does not reach

The target converters deliver 4 GS/s per ADC, and the fabric clock is 500 MHz. Real-time
operation therefore needs 8 input samples per clock into the filter bank, and about 5
channels per clock after channel selection (2,000 channels every 3,456/4 GS/s = 864 ns =
432 clocks). This RTL does everything at one sample per clock. At 500 MHz it processes
about 420 MS/s per feedline in real time, roughly a tenth of the band. Each block computes
what the full design computes, and the full-size test runs the complete 4,096-bin,
2,000-channel configuration. A real-time version would need the same blocks widened to
parallel lanes: a multi-path FFT, 8 PFB banks per clock, and several channel lanes. That
widening is not built.

Also outside this RTL:

- the RF data converters;
- the control computer and its 100G Ethernet link, replaced here by the plain
  register/read ports;
- the analogue I/Q mixers, 6 GHz local oscillators, amplifiers and attenuators;
- the cryogenic amplifiers and detectors;
- the rubidium 10 MHz / 1 PPS reference.

## Choices made here

The sizes come from the published design: 4,096 bins, 8 taps, 32/27 oversampling,
2,000 tones and channels per feedline, and two feedlines. So does the order of the
processing steps. Its source gives function and sizes, not circuits. The following are
this implementation's own choices:

- All of the internal architecture listed above: the SDF FFT, the banked PFB buffer, the
  double-buffered channel selection, the phase-accumulator oscillators, the single-pole IIR
  low-pass and the CORDIC phase.
- Word widths and rounding.
- Table depths: the DAC loop and the phase record, 65,536 each.
- The host register map.
- The filter. The source block diagram labels the low-pass filters "~250 MHz". That cannot be
  a cutoff for a channel sampled at about 1.16 MHz, so a simple per-channel IIR with
  time constant 4 frames is used.
- Where the oscillator is applied. The block diagram draws the oscillator table next to the
  low-pass filter, but the text applies it in the down-conversion step, and that is followed
  here. Its "sampled at 2 MHz" label is read as the frame rate, 4 GS/s / 3456 = 1.157 MHz,
  because the oscillator must advance once per frame.
- The order of the steps. Channel selection comes straight after the FFT, then the
  oscillator and mixer, then the low-pass filter. This is the order of the block diagram.
  One passage of the text puts selection last, but a bin that holds two tones can only get
  two differently tuned mixers if it is copied first.
- Which step removes the phase rotation. One passage credits the low-pass filter; the
  detailed description credits the down-conversion, which is what is built. The filter
  here only smooths.
- The ADC word width. The block diagram labels the ADCs 14-bit; a later section calls the
  samples 12-bit. The datapath is 16-bit and takes either.
- The window coefficients are loaded by the host rather than held in a ROM.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | checks |
|---|---|
| `tb_dac_lut` | replay order, wrap at two loop lengths, idle output |
| `tb_pfb_fir` | every output against an integer model (random data and coefficients, N=32, 4 taps, hop 27), back-pressure, frames back to back every N clocks |
| `tb_fft_sdf` | every bin against a direct DFT/N (N=64) with random input gaps, bin tags, latency `N + log2(N) - 2` |
| `tb_channel_select` | channel values and order, copied bin, read-out latency |
| `tb_dds` | cos/sin of the accumulated phase, sideband alignment, restart on rewrite |
| `tb_ddc` | complex product with saturation, de-rotation of a turning tone |
| `tb_lpf` | step and noise response against a real-valued model, channel isolation, reset clearing |
| `tb_phase_recorder` | phase against `atan2` within 3/65536 turn, record order, `wr_count`, 17-clock latency |
| `tb_pfb_scalloping` | `pfb_fir` + `fft_sdf` with 256 bins, tone swept across a bin in quarter-bin steps: critically sampled 4-tap bank loses 6.08 dB at the bin edge, the 8-tap bank oversampled by 32/27 loses 1.44 dB; both within 1 % of the closed-form response |
| `tb_mkid_readout_top` | end to end at N=64, 6 channels, 30 frames (scenario below) |
| `tb_mkid_readout_full` | the same scenario with the top at its default sizes, 20 frames, under 1 s of simulation |
| `tb_mkid_full_comb` | the top at its default sizes with a full comb on one feedline: 2,000 tones about 2 bins (1.95 MHz) apart across the band, 1/16-bin offsets varying from tone to tone, random starting phases; DAC playback, record order, and every channel's phase steady within 2 degrees (largest excursion observed: 1.0 to 1.3 degrees, depending on the random phases), about 6 s |

The end-to-end scenario (`tb/mkid_e2e_bench.sv`) works as follows. It loads windows, tone
combs, maps and increments. It loops the DAC output back into the ADC port through a capture
buffer, at the rate the ADC port accepts. It then reads the phase record through the host
port and checks:

- Channels with a bin-centred tone, a tone 1/4 bin off centre, and a negative-frequency tone
  keep their phase.
- Two tones in one bin, each on a copied channel, both stay steady.
- An uncorrected channel turns by exactly `frac(k*HOP/N)` per frame.
- A tone on a bin edge comes out within 3 dB of a centred one.

It also counts back-pressure, DAC loop wraps and the other mechanisms, and fails if any of
them never happened.

To run one testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    --top-module tb_mkid_readout_full rtl/mkid_pkg.sv tb/tb_mkid_readout_full.sv
./obj_dir/Vtb_mkid_readout_full
```

`-y rtl -y tb` lets Verilator find every other module by its file name. Any other
testbench runs the same way with its name in place of `tb_mkid_readout_full`. Block
testbenches run in well under a second, `tb_mkid_readout_full` in about a second and
`tb_mkid_full_comb` in about six.
