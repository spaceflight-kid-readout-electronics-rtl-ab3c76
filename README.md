# Digital readout for frequency-multiplexed KID arrays

A kinetic inductance detector (KID) is a superconducting microwave
resonator. Absorbed light shifts its resonance frequency and lowers its
quality factor. Many KIDs with slightly different resonance frequencies
share one coaxial line. A readout can therefore serve a whole array with one
DAC and one ADC:

- it sends a comb of tones, one parked on each resonator;
- it measures how the amplitude and phase of every tone change after the
  tones pass the array.

The firmware described here does this for a far-infrared space instrument.
Each readout chain generates and measures up to 1024 tones, enough for the
1008 detectors of one detector chain plus a few blind reference tones. The
chain spans the whole Nyquist band of a 12-bit converter pair, and it
produces:

- per-tone I/Q time-ordered data (TOD) at about 10 kHz;
- a cleaned, resampled science stream at a few hundred Hz.

Two chains fit on one FPGA board. The converters run at 5 GS/s. The
0.4–2.4 GHz band falls in the first Nyquist zone and the 2.5–5 GHz band in
the second.

The design uses the classic two-level channelizer:

1. **Coarse level.** A critically sampled polyphase filterbank (PFB) with
   N = 1024 bins cuts the band into 4.88 MHz slices. The synthesis PFB turns
   bins into DAC samples, and the analysis PFB turns ADC samples into bins.
2. **Fine level.** A numerically controlled oscillator (NCO) per tone places
   the tone anywhere inside its bin. On the way out, the NCO phasor is the
   content of the bin. On the way back, the received bin is multiplied by the
   conjugate of the same phasor (digital down-conversion, DDC). This brings
   the tone to DC, where accumulation averages everything else away.

Because the transmit and receive sides use one NCO stream, each tone is
received at exactly the frequency it was sent at. The delay of the analog
loop only adds a constant phase to each tone.

## Block diagram and data flow

```
                 cfg (register writes)
                        |
 frame tick --> nco_bank ----------------+-------------------------+
 (every N clk)  (1 phasor/clk,           |                         | (1 clk)
                 tones 0..1023)          v                         v
                              pfb_synthesis                       ddc <-- bin_select <-- pfb_analysis <-- adc_data
                               tone_bin_mapper                     |        (per-tone     (FIR + FFT)
                               conj + FFT (= IFFT)                 |         bin read)
                               bit-reverse, real part              v
                               polyphase FIR, >>DAC_SHIFT     tod_accumulator  (sum of 488 frames: 10.006 kHz)
                                      |                            |
                                      v                            +--> raw_tod
                                  dac_data                    glitch_remover  (matched filter + threshold)
                                                                   |
                                                              frac_resampler  (16.16 step, linear interp.)
                                                                   |
                                                                   v
                                                                  tod
```

`kid_readout_fpga` is the top. It holds `NCHAINS = 2` copies of
`readout_chain`, each with its own configuration port, DAC, ADC and TOD
outputs. Four such boards make the eight chains of the full instrument.

### One sample per clock

Each part of the datapath takes or gives one converter sample per clock,
so the clock *is* the sample clock. The N-sample frame of the filterbanks
is also N clocks long. The NCO bank sweeps all tone slots once in that
time, one tone per clock. This is why the tone count cannot exceed the bin
count (1024). It keeps every block simple to read and to check. A real 5 GS/s
device needs the same arithmetic spread over several samples per clock at
a few hundred MHz; that parallel form is not part of this RTL.

### Frame timing

A free-running counter in `readout_chain` ticks every N clocks.

| event | clock (tick at 0) |
|---|---|
| NCO sweep j starts (tone 0 on `nco.out`) | 2 |
| tone-to-bin buffers swap, bins of sweep j−1 stream into the IFFT | 3 |
| first DAC sample of the frame built from sweep j | 3N + log2(N) + 3 after its sweep starts |
| analysis FFT frame out (`out_sof`) | N + log2(N) after the ADC frame start |
| TOD record for tone t | once every ACC_LEN frames, in tone order |

The two filterbanks have different latencies, and an analog loop adds an
unknown delay. The design does not try to line analysis frames up with
synthesis frames:

- `bin_select` keeps three rotating frame buffers, so a whole complete
  analysis frame is always there to be read while the next one is written.
- The tone sweep reads from that frame at whatever phase it happens to
  have.
- A fixed offset between the sides only rotates each tone's I/Q by a
  constant angle.

## The filterbanks

This is the part that most needs explanation.

### Analysis (`pfb_analysis`)

For frame f and branch k = 0..N−1, the polyphase FIR (`pfb_fir`) forms

    y_f[k] = sum_{m=0}^{TAPS-1} h[m*N + k] * x_{f-m}[k]  >>> 15

Here x_f[k] is sample k of ADC frame f and h is a TAPS·N-tap prototype
low-pass window. The window is loaded through registers, so the bin shape
is software's choice. Each branch keeps TAPS−1 old samples in one memory
row, so each clock is one row read and one row write. The N outputs of a
frame then go through an N-point FFT.

The ADC is real, so the FFT input has zero imaginary part and bins k and
N−k are complex conjugates:

- Bins 0..N/2−1 hold 0..fs/2 (the first Nyquist zone).
- A signal in the second zone (fs/2..fs) appears as its alias fs − f.
- The analog band filters choose which zone the chain sees.

### The FFT (`fft_sdf`, `fft_sdf_stage`)

The FFT is a radix-2 single-path delay-feedback (SDF) pipeline,
decimation in frequency. Stage g has a delay line of D = N/2^(g+1) complex
words. Within each block of 2D samples:

1. The first D samples go into the delay line. Meanwhile, the line's old
   contents go out, multiplied by the twiddle W^(n·2^g) with
   W = exp(−j2π/1024). These old contents are the differences left by the
   previous block.
2. For the next D samples, each input is paired with the stored sample of
   the same index. The sum goes straight out; the difference goes back into
   the line.

Ten stages make the 1024-point transform. Its output is one bin per clock,
in bit-reversed order. Each stage adds D + 1 clocks of latency, so the whole
FFT adds N − 1 + log2(N) clocks.

Twiddles and NCO phasors come from one 257-entry quarter-wave sine table,
`rtl/sin_quarter.hex`, with T[i] = round(32767·sin(2πi/1024)), i = 0..256.
The other three quadrants are folded from it, and cos(p) = sin(p + 256).

A per-stage `SCALE` bit can halve sums and differences. The analysis FFT
runs unscaled: 24-bit bins hold a full-scale 12-bit on-bin sine, which grows
to about 2047·N/2.

### Synthesis (`pfb_synthesis`)

The synthesis side runs the same steps in the opposite order:

1. **tone_bin_mapper.** Every tone t adds amp[t]·(c + js)·2^−15 into bin
   bin[t] of a frame buffer, so any number of tones may share a bin. Two
   buffers alternate: one is being built from the current sweep while the
   other streams out and is cleared behind the read.
2. **Inverse FFT.** This is the same SDF FFT applied to conj(X). The real
   part of FFT(conj X) equals N times the real part of IFFT(X), and only
   the real part is needed. No extra hardware is used for the inverse.
3. **bitrev_reorder.** Double-buffered, it turns the bit-reversed output
   into time order and keeps the real part.
4. **pfb_fir.** The same polyphase FIR as the analysis side, with its own
   window (`REG_SYN_COEF`).
5. **Output scaling.** A right shift by `DAC_SHIFT = 9` with saturation to
   the 12-bit DAC word.

For a real DAC at fs:

- Bin k < N/2 produces a line at k·fs/N and its image at fs − k·fs/N.
- To serve the 2.5–5 GHz band, software places each tone in the mirrored
  bin with the conjugated tuning word. The RF filter then keeps the
  second-zone image.

## Tone generation and selection

### NCO bank (`nco_bank`)

The NCO bank is one phase accumulator per tone slot, time-shared over the
frame:

- Each tone's 16-bit phase lives in a RAM.
- At every frame tick the bank sweeps tones 0..1023 in order. For each tone
  it reads the phase, writes back phase + FTW, and outputs the phasor of
  (phase + phase offset).
- The phase advances once per frame, at fs/N = 4.883 MHz. One tuning-word
  LSB is therefore 4.883 MHz / 2^16 = 74.5 Hz, far finer than the
  resonator linewidths (tens of kHz at Q ≈ 10^4).
- The offset is per tone, so blind tones and crest-factor phase patterns
  can be set.
- A clear command zeros all accumulators at the next sweep. This makes tone
  phases reproducible after retuning.

Only the top 10 bits of the phase address the sine table.

### Bin select and DDC (`bin_select`, `ddc`)

`bin_select` writes each analysis frame into its buffer at the natural bin
address, which undoes the FFT's bit-reversed order. For each tone of the
sweep, it then reads `bin[t]` from the last complete frame. Because the
sweep is tone by tone, tones in a shared bin each get their own copy.

`ddc` multiplies that sample by (c − js), the conjugate of the same tone's
phasor delayed by one register:

    I = (re·c + im·s) >>> 15
    Q = (im·c − re·s) >>> 15

An assertion checks that the tone number of the bin sample and of the
phasor agree.

### Accumulation (`tod_accumulator`)

Per tone, `ACC_LEN = 488` successive DDC outputs are summed. The sum is
shifted right by `ACC_SHIFT` and sent as one TOD record
`{tone, glitch, i, q}`. The rate is 5 GHz / 1024 / 488 = 10.006 kHz, the
nearest integer length to the 10 kHz maximum output rate. The boxcar also
rejects the other tones in the same bin when their offset frequencies
differ by a multiple of fs/N/ACC_LEN.

## Post-processing of the TOD

### Glitch remover (`glitch_remover`)

A cosmic-ray hit on a KID gives a fast step in I/Q that decays with the
detector's ~1 ms time constant, about ten TOD samples. For every tone the
block keeps the last `MF_LEN = 8` samples of I and Q and runs a matched
filter:

    y = sum_j tpl[j]·x[n−j] >>> 15

The template is loaded by software. A zero-mean template keeps the steady
tone level from triggering the filter.

- **Detection.** When |y_I| + |y_Q| exceeds `REG_GL_THR`, the whole
  window, plus `REG_GL_HOLD` further samples, is marked as glitched.
- **Output.** The output is the oldest sample of the window, so it lags by
  MF_LEN − 1 records and a glitch is known before its first sample leaves.
- **Replacement.** Marked samples are replaced by the tone's last unmarked
  output and carry `glitch = 1`, so the ground can still see where data was
  filled in.
- **Reset.** After reset the threshold is all ones, so nothing is flagged
  until software sets it.

### Fractional resampler (`frac_resampler`)

The science rate (about 100–700 Hz) is not an integer fraction of
10.006 kHz, so the resampler keeps a 16.16 fixed-point time `rem` to the
next output instant:

- With each new TOD frame (marked by tone 0): if rem ≤ 1.0, an output
  instant lies between the previous sample p and this one c. Every tone is
  emitted as y = p + (c − p)·rem (linear interpolation), and rem grows by
  `REG_RS_STEP`.
- In every case rem then drops by 1.0.
- The output's glitch flag is c's, ORed with p's unless the weight is
  exactly 1.0.
- After reset STEP = 1.0, which passes the TOD through unchanged.

There is no separate anti-alias filter. The accumulator's boxcar is the
only low-pass before decimation, so choose STEP with that in mind.

## Register map

Each chain has its own write port, `cfg = {we, addr[15:0], data[31:0]}`,
one write per clock. Every block decodes its own range (`kid_pkg`).

| address | name | meaning |
|---|---|---|
| 0x0080 | GL_THR | glitch threshold on \|y_I\|+\|y_Q\| |
| 0x0081 | GL_HOLD | extra blanked samples after a detection window |
| 0x0088 + j | GL_TPL | matched-filter tap j, signed Q1.15 (j < MF_LEN) |
| 0x0090 | RS_STEP | resampler step, 16.16, ≥ 1.0 |
| 0x0091 | NCO_CLR | any write: zero all NCO phases at the next sweep |
| 0x1000 + i | SYN_COEF | synthesis window tap i (i < TAPS·N), Q1.15 |
| 0x2000 + i | ANA_COEF | analysis window tap i, Q1.15 |
| 0x4000 + t | FTW | tone t tuning word (16 bits, 74.5 Hz/LSB) |
| 0x4400 + t | PHOFS | tone t phase offset (16 bits) |
| 0x4800 + t | AMP | tone t amplitude, signed 16 bits (0 = off) |
| 0x4C00 + t | BIN | tone t filterbank bin (used on both transmit and receive) |

The window memories are not reset, so they must be written before the data
means anything. The end-to-end testbenches load a rectangular window, with
h[k] = 32767 for the newest frame (k < N) and 0 for older frames. The
filterbank tests use a two-tap window (0.5 on the newest frame, 0.25 on
the one before), so the memory of older frames is tested too.

## Where this design departs from the source description

- **NCO count.** The source describes "32 NCOs" and up to 32 tones per
  bin, and also 1008 detectors per chain. Here every one of the 1024 tone
  slots has its own time-shared accumulator. This covers both numbers: any
  number of tones may share a bin.
- **NCO precision.** A block diagram label gives 9-bit NCO precision, while
  the text gives 16-bit phase accumulators. The 16-bit accumulator is used
  here, with a 10-bit sine table address.
- **Frequency step.** The source quotes 149 Hz (fs/N/2^15). This RTL steps
  the phase once per frame, which gives 74.5 Hz per LSB.
- **Output rate.** The 10 kHz rate is 10.006 kHz (ACC_LEN = 488).
- **Deglitching.** This is described as work in progress, but it appears in
  the chain, so it is built. The detector statistic, window, hold and
  replacement rule are this design's own.
- **Filterbank internals.** The prototype windows, tap count (4), FFT
  architecture, bin widths, scaling and the whole register map are this
  design's choices.
- **Sample rate.** The datapath takes one sample per clock. It has not been
  mapped to a multi-sample-per-clock form for a 5 GS/s FPGA implementation.
- **Outside the RTL.** The converters, RF switching and filtering, the
  SpaceWire I/O card and the command computer are not modelled. Their
  digital sides are the `cfg`, `dac_*`, `adc_data` and `tod` ports.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares outputs
with values worked out independently of the block, for example by a
floating-point DFT, NCO phase arithmetic or an independent accumulator
model. Each prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

The end-to-end tests (`tb_readout_chain`, `tb_kid_readout_fpga`, and
`tb_kid_readout_fpga_full` at the top's default sizes with N = 1024,
1024 tones and ACC_LEN = 488) close the loop. They feed each DAC back to
its ADC with a 3-clock delay and check:

- the magnitude of an on-bin tone against the expected gain;
- two tones sharing a bin;
- a tone offset inside its bin;
- a silent tone (isolation);
- a gain dip that imitates a glitch, which must be flagged and filled in;
- a fractional resampling step of 1.5;
- an NCO phase clear.

Each of these events is counted, and a test fails if one never happens. The
full-size run takes under a minute of simulation.

`tb_full_tone_load` loads every one of the 1024 tone slots in both chains:

- 1008 detector tones spread two or three to a bin over 0.4–2.4 GHz;
- 16 blind tones below the band.

It checks the I/Q level of every tone to 5%, and checks that the science
stream is the raw TOD, delayed, bit for bit. Its loop delay lines the ADC
frames up with the DAC frames. With the rectangular test windows, a loop
delay that cuts frames makes each tone whose phase steps from frame to
frame leak a few 1/N of its level into all bins. With a thousand tones this
adds up to about 10% errors. A real prototype window (TAPS = 4) is what
suppresses this in use.

`tb_science_rates` drives the resampler at both ends of the science-rate
range: 700 Hz and 100 Hz out of 10.006 kHz, which are steps of 14.29 and
100.06. It checks every interpolated value and the number of outputs.

Simulate with Verilator 5 from the directory that holds `rtl/` and `tb/`.
The sine table is read by the relative path `rtl/sin_quarter.hex`.

    verilator --binary --timing --assert -Irtl -Itb rtl/kid_pkg.sv \
        tb/tb_readout_chain.sv --top-module tb_readout_chain -Mdir obj
    ./obj/Vtb_readout_chain

Replace `tb_readout_chain` with any other testbench name. Sizes can be
changed through the parameters of `readout_chain` or `kid_readout_fpga`
(N must be a power of two, 4 ≤ N ≤ 1024, and NTONES ≤ N because one sweep
must fit in one frame).
