# A 32768-channel polyphase FFT spectrometer core in SystemVerilog

This is the digital core of a wide-band radio-astronomy spectrometer, written
as RTL. An ADC samples a 2.5 GHz wide intermediate-frequency band at 5 GS/s
with 10 bits. The core turns this sample stream into power spectra of 32768
channels, each 76.3 kHz wide. It averages as many spectra as the host asks for
and hands each finished spectrum over as 32-bit floating-point numbers.

The design follows the published description of the MPIfR XFFTS "32k core":
the sequence of stages, the FFT split (16 x 2048), the pairing of FFT streams
in the channel transformation, and the word width after every stage. How each
stage is built inside is this design's own choice. The paper names and sizes
most stages but does not describe their insides.

```
 ADC words      sample_demux   wola          combined_fft    chan_transform  power_builder  spec_accum     int2float
 32 x 10 bit -> block order -> 4-tap PFB  -> 16 x 2048 FFT -> real spectrum -> Re^2+Im^2   -> integrate  -> IEEE-754
                 10 bit         13 bit        29 bit           30 bit          60 bit         72 bit         32 bit
                                  ^ coefficients                                               ^ NINT, run
                                  +-------------------- ctrl_regs (host bus) -------------------+
```

## Data format

The core runs on one clock. Every clock brings one word of 2·NL = 32
consecutive ADC samples, so 5 GS/s needs a 156.25 MHz clock; the paper gives
no clock rate.

A *frame* is K = 65536 samples, which is 2048 clocks. Each frame yields one
spectrum.

Inside the core, data move as NL = 16 parallel *streams*. Every stage uses the
same handshake:
- `valid` marks a word;
- `sof` marks the first word of a frame;
- each stage counts positions in the frame from the last `sof`.

The stages never stall, and every stage accepts a word on every clock.

## The stages

### Demultiplexing into block order (`sample_demux`)

The FFT further down needs the frame split into 16 contiguous blocks, one per
stream. Complex stream l, at frame position t, must see samples
2(2048·l + t) and 2(2048·l + t) + 1.

The ADC word, however, holds 32 samples that are next to each other in time.

`sample_demux` writes each frame into 32 memory banks with a rotating skew. It
reads the previous frame back in block order, one word per clock, with no bank
conflicts. This costs one frame of latency.

### Weighted overlap-add pre-filter (`wola`)

The polyphase pre-filter replaces a plain window. Each output sample is a sum
over four frames:

    y[n] = sum_{m=0..3} h[m·K + n] · x_m[n]

Here x_0 is the current frame and x_m the frame m frames earlier. This gives a
filter four frames long, which has a much flatter passband and steeper skirts
than a simple window.

How it is built:
- Three frames of delay line per sample lane.
- 262144 coefficients in 16-bit fixed point, where 1.0 = 2^14. They are loaded
  over the host bus, because the paper does not list the window.
- The product sum is shifted right by 14 and saturated to 13 bits.
- Output starts once three earlier frames are held.

### Combined FFT (`combined_fft`, `fft_pipeline`, `sdf_stage`)

The 65536 real samples of a frame are packed two per complex number:
z[n] = y[2n] + j·y[2n+1]. That leaves a 32768-point complex FFT. With bin
k = s + 16·b, the transform splits into three steps:

1. A 16-point DFT across the streams at each position t. This is combinational
   radix-2, bit-reversed into natural order.
2. A rotation of stream s by exp(−j2π·t·s/32768).
3. An independent 2048-point FFT per stream (`fft_pipeline`).

`fft_pipeline` is a radix-2 single-path delay-feedback pipeline of 11 stages
(`sdf_stage`), decimation in frequency. It takes one sample per clock and has
a ping-pong buffer that puts the output back into natural order.

So stream s carries bins s, s+16, s+32, ….

Word widths:
- Nothing is rounded. Each butterfly stage adds one bit, the lane DFT adds 4
  bits and the rotation adds a guard bit, giving 13 + 15 + 1 = 29 bits.
- Twiddles are 18 bits with 1.0 = 2^16. A twiddle product is scaled back by
  2^16, and that is the only truncation.

All twiddle tables are computed as constants while the design elaborates. No
table files are needed.

### Channel transformation (`chan_transform`)

Packing real samples two per complex input mixes the spectra of the even and
odd samples. The spectrum of the real frame comes back as:

    A = Z[k] + conj Z[N−k],  B = Z[k] − conj Z[N−k],  X[k] = (A − j·e^{−jπk/N}·B) / 2

Bin k sits on stream s, while its partner N − k sits on stream (16 − s) mod 16
in reverse order. So the 16 streams form pairs: 1 with 15, 2 with 14, … 7 with
9. Streams 0 and 8 are each paired with themselves.

Each pair works from a one-frame ping-pong buffer, because the partner has to
be read backwards. The result grows to 30 bits.

The Nyquist channel k = 32768 is not produced, so a spectrum has exactly 32768
channels: 0 to 2.5 GHz in 76.3 kHz steps.

### Power and integration (`power_builder`, `spec_accum`)

`power_builder` squares the channels into 60-bit powers.

`spec_accum` adds NINT consecutive spectra per channel into a 72-bit
accumulator. It keeps one two-bank memory per stream:
- While one bank integrates, the other is read out, so no spectrum is lost at
  a dump.
- The read-out sends channels 0 … 32767 at one per clock. It takes 32768
  clocks, so an integration must last at least 16 spectra (0.21 ms).
- A dump that arrives before the read-out has finished abandons it and raises
  `overrun`.
- Additions saturate at 2^72 − 1 and raise `overflow`.
- Clearing the run bit drops the integration in progress at the next frame.

### Floating-point conversion (`int2float`)

`int2float` turns each 72-bit sum into an IEEE-754 single-precision word:
- It finds the leading one and truncates the mantissa.
- Zero becomes +0.0.
- Channel number and last flag travel alongside.

### Host registers (`ctrl_regs`)

In the instrument, control and spectra go over ethernet. Here a plain
register bus stands in for the register side of that link. Writes are
`bus_we`/`bus_addr`/`bus_wdata`; reads come out on `bus_rdata` one clock later.

| address | name | meaning |
|---|---|---|
| 0x00000 | CONTROL | bit 0: run |
| 0x00001 | NINT | spectra per integration, reset value 16 |
| 0x00002 | STATUS | [15:0] dumps since clear, [16] overflow seen, [17] overrun seen (read only) |
| 0x00003 | CLEAR | write: clear STATUS |
| 0x40000 + i | COEF | write coefficient i = m·65536 + n (tap m, sample n), 16-bit two's complement |

## The top, `xffts_core`

`xffts_core` wires the stages in the order shown above.

Ports:
- `adc_valid`, `adc_data[32][10]`: the sample stream.
- The host bus.
- The spectrum stream: `spec_valid`, `spec_chan`, `spec_data` (float),
  `spec_last`, plus `spec_dump` at each finished integration.

Parameters:
- `NL` (16) and `NP` (2048) set the size.
- `ACC_W` (72) sets the integrator width.
- `CNT_W` (24) sets the width of NINT.

The intermediate widths follow from the size by the paper's rule: +2 in the
WOLA, +log2(N)+1 in the FFT, +1 in the channel transformation, ×2 in
squaring. Setting `NP = 4096` gives the 64k-channel variant.

Latency from the last sample of a frame to its spectrum entering the
integrator is about four frames: the demux, two in the FFT, and the channel
transformation. On top of that, the WOLA waits three frames after start-up.

## Where this departs from the paper, or goes beyond it

- **Insides of the stages.** The paper gives the order and widths of the
  stages and the 16 × 2048 split. The demux scheme, the FFT decomposition and
  architecture, the channel-transformation formula and buffering, the
  accumulator's double buffering and the float conversion are standard
  constructions chosen here.
- **Window coefficients.** The paper's window is designed for an ENBW of 1.16
  channel spacings (88.5 kHz), but its coefficients are not published. The
  core loads any 4 × 65536 set, so the resolution depends on what is loaded.
- **Rounding.** The paper computes without rounding. Here, too, no result is
  rounded; only the twiddle products are truncated back to the data width.
  The WOLA output saturates at 13 bits.
- **Control.** Register map, run bit, status flags, overrun and saturation
  handling are this design's own.
- **Not built:**
  - the ADC itself and its four-core interleave calibration, whose algorithm
    the paper does not give;
  - the sampling-clock synthesizer;
  - the GPS/IRIG-B time decoder;
  - the ethernet interfaces;
  - the crate controller and power supplies.

  Their places are the `adc_*`, `bus_*` and `spec_*` ports.

## Verification

Each module has a self-checking testbench in `tb/`:
- It compares against values computed independently in real arithmetic:
  direct DFTs, a direct WOLA, the real-FFT formula, and IEEE-754 decoding by
  hand.
- It checks frame timing and throughput in clocks.
- It ends with a line `TB_RESULT checks=… failures=…`.

Most tests run at reduced sizes (for example 4 × 8 lanes × points) to keep
simulation short.

`tb_xffts_core` runs the whole core at NL = 4, NP = 8 with a 28-bit
integrator, and compares the first two integrations channel by channel with a
model. It then makes each mechanism happen and counts it:
- coefficient load;
- regular dumps;
- a change of integration length;
- a read-out overrun;
- integrator saturation;
- stopping the run.

`tb_xffts_full` runs the core at its default size: 32768 channels, 72-bit
integrator, no parameter overrides. It loads a pass-through window, feeds a
cosine on channel 1000 and checks the peak height, the leakage and the dump
spacing of the first integration.

To simulate with Verilator, for example:

    verilator --binary --timing --assert -Irtl rtl/spec_pkg.sv tb/tb_xffts_core.sv --top-module tb_xffts_core
    ./obj_dir/Vtb_xffts_core

## Files

- `rtl/spec_pkg.sv`: widths and the twiddle/bit-reversal helper functions.
- `rtl/sample_demux.sv`, `rtl/wola.sv`, `rtl/combined_fft.sv`,
  `rtl/fft_pipeline.sv`, `rtl/sdf_stage.sv`, `rtl/chan_transform.sv`,
  `rtl/power_builder.sv`, `rtl/spec_accum.sv`, `rtl/int2float.sv`,
  `rtl/ctrl_regs.sv`: the stages.
- `rtl/xffts_core.sv`: the top.
- `tb/tb_<module>.sv`: the testbenches.
