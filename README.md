# Digital linear-to-circular polarization converter

A radio receiver with two crossed linear dipoles delivers two voltages, x(t)
and y(t). A circularly polarized wave shows up in them as two signals of
equal amplitude, 90° apart in phase. Left- and right-hand circular
polarization (LHC, RHC) can therefore be formed as X − jY and X + jY. This
works only if the two receiver chains are identical. In practice their
gains and phases differ, and the differences change across a wide band. An
analogue hybrid cannot correct that over a 100 % fractional bandwidth.

This design does the conversion digitally, channel by channel in the
frequency domain:

1. Each polarization is cut into frames and Fourier transformed into 512
   channels of 1 MHz (1024 MS/s, 1024-point transforms).
2. **Calibration.** A noise diode injects one common broad-band signal into
   both dipoles. The design integrates |X|², |Y|² and the cross spectrum
   Z = X·Y\* per channel, once with the diode on and once with it off. It
   keeps the difference. The phase of Z is the phase difference of the two
   chains. The ratio of |X|² to |Y|² is their gain difference.
3. From these sums it computes, per channel, two gains and a rotation
   (cos θ, sin θ). It also computes a window that switches off channels
   with too little calibration signal. It latches all of them.
4. **Observation.** Every later spectrum is equalized with the latched
   weights: Y is rotated by θ, and X and Y are scaled so both chains have
   the same gain. Then LHC = X' − jY'' and RHC = X' + jY'' are formed per
   channel. The output is the power of each, 51 bits per channel.

The sampler (ADC), the 1:8 demultiplexer that produces eight samples per
128 MHz clock, and the eight streaming FFT engines are existing parts. They
are outside the RTL, and the top module has ports where they connect.
Everything between them and the output powers is here.

## Data path and lanes

All logic runs on one clock, 128 MHz at full rate. On every clock it takes
eight 10-bit unsigned samples of x and eight of y.

```
x_samp[8] ─► sfg ─┐          ┌────────── lane l = 0..7 ────────────┐
                  ├─► FFT l ─► fft_decoder ─► pwr_accum ─┐          │
y_samp[8] ─► sfg ─┘ (external)   │                      │ on/off    │
                                 │                      ▼          │
                                 │        acc_sum (Σ over 8 lanes, on − off)
                                 │                      ▼
                                 │        eq_params (+ window_fn, seq_div, seq_isqrt)
                                 │                      ▼
                                 │        coef_latch ×2 (gains | cos,sin)
                                 ▼                      ▼
                              eq_sync ◄─────────────────┘
                                 ▼
                              equalizer ─► cp_former ─► |V_LHC|², |V_RHC|²
```

**Serial frame generator (`sfg`).** One instance per polarization. An FFT
engine takes one sample per clock, but eight samples arrive per clock. The
generator therefore writes consecutive 1024-sample frames into eight
buffers in turn; filling one takes 128 clocks. Each buffer is read out
serially into its own FFT lane, starting one clock after its first word was
written. A buffer takes 1024 clocks to drain. That is exactly the time
needed to fill the other seven buffers and start refilling it, so writing
and reading overlap without a stall. The lanes start 128 clocks apart.

Each buffer has 8 banks of 128 words. One clock's eight samples go to the
eight banks at the same address, and the serial read takes one bank per
clock. On the way out, the sample is zero-extended to the 11-bit two's
complement input of the FFT. The ADC's mid-scale offset is not removed, so
it appears as a DC term in channel 0.

A clock without `in_valid` freezes the whole generator, both writing and
reading, so frames stay aligned through gaps.

**Two real transforms in one complex FFT (`fft_decoder`).** x goes to the
real input of the FFT and y to the imaginary input, so one engine
transforms both. For the output Z[k], the two spectra are recovered as

    X[k] = (Z[k] + conj Z[N−k]) / 2
    Y[k] = (Z[k] − conj Z[N−k]) / 2j

The decoder buffers a whole output frame in one half of a ping-pong memory.
It then emits channels 0..511, one per clock, reading Z[k] and Z[N−k] from
the memory together. The next frame fills the other half meanwhile. The
upper 512 bins only mirror the lower ones and are dropped. The halving is
an arithmetic shift, so the spectra stay 22 bits wide.

Each lane thus delivers 512 channels every 1024 clocks. The eight lanes
together carry the full 1024 MS/s.

## Calibration

**Accumulation (`pwr_accum`, one per lane).** For each decoded channel the
accumulator forms

    |X|² = Xr² + Xi²     |Y|² = Yr² + Yi²
    Zr = Xr·Yr + Xi·Yi   Zi = Xi·Yr − Xr·Yi

and adds them to one of two banks, chosen by the noise diode state sampled
at channel 0 of the frame.

A `cal_start` pulse arms all eight lanes. Each lane then accumulates
`int_frames` whole frames from its next frame start.

- The first frame written into a bank replaces its contents, so no clearing
  pass is needed.
- A bank that receives no frame in a run reads as zero. A calibration with
  the diode on only is therefore valid.

`int_frames` can be as large as 2^20 frames per lane. That is 2^23 frames in
all, or 8.39 s of data. The 45-bit products plus 20 bits of headroom give
65-bit accumulators, which cannot overflow at that length. Smaller values
give shorter calibrations, for tests or quick recalibration.

**Lane sum (`acc_sum`).** When every lane is done, calibration processing
stops and the weights are computed one channel at a time. For each
requested channel, `acc_sum` reads all eight lanes and returns
Σ_lanes (on − off) for each of the four quantities, in 69 bits.
Subtracting the diode-off state removes everything common to both states:
sky, receiver noise and interference that is present throughout. This
includes the ADC's DC term, but only if both banks hold the same number of
frames. The difference is not normalised by frame count, so the diode must
spend equal time on and off (50 % duty, even `int_frames`). With unequal
counts, the DC channel can dominate Pmax and max|Z|, which then closes the
window over the whole band.

**Weights (`eq_params`, `window_fn`).** There are two passes over the 512
channels.

Pass 1 finds:
- Pmax, the largest |X|² or |Y|² in the band;
- max|Z|, the largest cross-spectrum magnitude.

Pass 2 computes, per channel r:

    Gx = sqrt(Pmax / |X|²)      Gy = sqrt(Pmax / |Y|²)
    cos θ = Zr / |Z|            sin θ = Zi / |Z|
    W = 1 if 4·|Z| > max|Z|, or r = 0;  else 0

and writes Gx·W, Gy·W, cos θ·W and sin θ·W into the latches.

The gains bring both chains up to the strongest channel of the band. That
flattens the band and equalizes x against y. The window keeps only channels
with a usable calibration signal, within a factor of four of the peak
(6 dB, since |Z| is a power). Outside those channels the output is zero.
Channel 0 is always kept so the converter's DC term passes. It gets the
weights computed for it, multiplied by 1.

The arithmetic is fixed-point, using one shared restoring divider
(`seq_div`) and one digit-by-digit square root (`seq_isqrt`):

- |Z| is found by shifting Zr and Zi right by a common amount s until both
  fit 31 bits, then computing sqrt(Zr² + Zi²) and shifting the result left
  by s. This block normalisation does the job of a floating-point exponent.
- cos θ and sin θ are signed, 18 bits wide with 16 fractional bits.
- The gains are unsigned, 18 bits wide with 12 fractional bits. They
  saturate just below 64.
- A channel with |X|² ≤ 0 or |Y|² ≤ 0 after on − off gets gain 0.
- A channel with |Z| = 0 gets cos θ = sin θ = 0.

Computing one channel takes about 590 clocks. The whole band takes about
3·10^5 clocks, 2.3 ms at 128 MHz. This is short next to the integration
time.

**Latches (`coef_latch`, two instances).** One instance holds {Gx·W, Gy·W}
and the other {cos θ·W, sin θ·W}. Each has one write port and eight
registered read ports, one per lane, because the lanes reach a given
channel at different times. They reset to zero, so no signal passes before
the first calibration.

## Observation

**Synchronization (`eq_sync`).** Each lane's decoded channel number is the
latch read address. The spectrum is delayed one clock to meet the
registered latch output, so each channel leaves together with its own
weights. Until weights have been written (`params_valid`), the outputs are
held off.

**Equalizer (`equalizer`, per lane).** Y is rotated onto the phase of X and
both are scaled:

    Y''r = Gy·(cos θ·Yr − sin θ·Yi)     Y''i = Gy·(sin θ·Yr + cos θ·Yi)
    X'   = Gx·X

Each product is truncated by an arithmetic right shift, and the results
saturate to 24 bits. There are two pipeline stages: rotation, then gain.

**Circular outputs (`cp_former`, per lane).** Multiplying by ±j swaps the
real and imaginary parts and negates one of them:

    LHC = X' − jY'' = (X'r + Y''i) + j(X'i − Y''r)
    RHC = X' + jY'' = (X'r − Y''i) + j(X'i + Y''r)

It outputs the 25-bit complex voltages and the 51-bit powers |LHC|² and
|RHC|². For a wave that is purely LHC at the dipoles, the RHC power
vanishes after equalization, and the other way round. For a linear wave,
the two powers are equal.

## Control and timing

`polconv_top` has a small mode sequencer with four modes:

| mode      | entered when                            | what runs |
|-----------|-----------------------------------------|-----------|
| `IDLE`    | reset                                   | data path only |
| `ACCUM`   | `cal_start`                             | lane accumulators |
| `COMPUTE` | every lane has taken `int_frames` frames | `eq_params` writes the latches |
| `OBSERVE` | weights written                         | equalized LHC/RHC outputs (`params_valid` = 1) |

A new `cal_start` in any mode starts a new calibration. It drops
`params_valid`, and the outputs stay off until the new weights are written.

Latencies at one clock per sample:

| from | to | clocks |
|------|----|--------|
| sample word in | first sample to its FFT lane | 2 |
| last FFT bin of a frame | first decoded channel | 2 |
| decoded channel | LHC/RHC power | 5 (sync 1, equalizer 2, former 2) |
| decoded channel, total from last FFT bin | LHC/RHC power | 7 |

Each lane gives 512 output channels per 1024 clocks. Lane l is 128·l clocks
behind lane 0.

## Number formats

| signal | bits | format |
|--------|------|--------|
| ADC sample | 10 | unsigned |
| FFT input | 11 | two's complement, zero-extended sample |
| FFT output, decoded X/Y | 22 | signed, unscaled transform |
| product, |X|² etc. | 45 | signed |
| lane accumulator | 65 | signed, 2^20 frames |
| lane sum (on − off) | 69 | signed |
| gain Gx·W, Gy·W | 18 | unsigned, 12 fractional bits |
| cos θ·W, sin θ·W | 18 | signed, 16 fractional bits |
| equalized X', Y'' | 24 | signed, saturating |
| LHC/RHC voltage | 25 | signed |
| LHC/RHC power | 51 | unsigned |

Only the 11-bit FFT input and the 51-bit output power are fixed by the
original design. Every other width is chosen here, so that nothing before
the equalizer can overflow.

## Departures from the original design

- **Weight arithmetic.** The original uses a floating-point divide and
  square-root core clocked at 64 MHz. Here these are fixed-point sequential
  units on the single main clock, with the normalisation described above.
  The results agree to within the rounding of the 18-bit weight formats.
- **Integration length.** The original integrates for a fixed time of about
  8.4 s. (One passage gives 8 s, i.e. 8·10^6 frames. The implementation
  section gives 8.4 s.) Here the length is the run-time input `int_frames`,
  and the 8.4 s maximum sets the accumulator width.
- **Gain approximation not built.** An approximate form of the gains, using
  summed voltage magnitudes instead of powers, is described as an
  alternative. It is not built.
- **External parts.** The ADC, the demultiplexer and the FFT engines are
  not included. The FFT engines are expected to:
  - take `fft_in_*` (valid, index, 11-bit real and imaginary parts);
  - return every bin of a frame once, with its index, on `fft_out_*`
    (22-bit unscaled parts);
  - deliver the bins in any order, as long as a frame's last bin (index
    1023) comes last.
  `tb/fft_model.sv` is a behavioural model of such an engine.
- **Choices not specified by the original.** These are the handshake
  (valid signals, no back-pressure), the asynchronous active-low reset,
  the diode-state sampling at channel 0, the truncation points, and the
  treatment of empty or negative channels.
- **One module.** The original was spread over several FPGA boards. Here it
  is one synthesizable module.

## Simulating

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. For example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/polconv_pkg.sv rtl/*.sv tb/fft_model.sv tb/tb_polconv_top.sv \
    --top-module tb_polconv_top
./obj_dir/Vtb_polconv_top
```

For the unit tests, replace the last file and the top module, e.g.
`rtl/polconv_pkg.sv rtl/equalizer.sv tb/tb_equalizer.sv --top-module
tb_equalizer`.

`tb_polconv_top` runs the top at its full default size: 8 lanes, 1024-point
frames and 512 channels. The only reduction is a short calibration
(`int_frames` = 8 per lane). The stimulus is:

- twelve tones;
- y given a different gain and a frequency-dependent phase;
- an interfering tone present in both diode states;
- the diode toggling every 16 frames.

The test checks four things:
- the computed weights against the known chain differences;
- that the window closes the empty channels;
- that LHC, RHC and linear test signals give the expected power split;
- that the interferer cancels in the on − off difference.

It counts each mechanism: both diode states, both decoder buffer halves,
the mode changes, windowed-off outputs, and each polarization case. It runs
in a few seconds.

`tb_polconv_chamber` repeats, at full size, the kind of measurement the
converter was built for. The source is broad-band noise over channels
140–490, with a humped and rippled spectrum. The y chain has its own gain
curve and a 2.5-sample path delay. Calibration uses 488 frames per lane,
i.e. 4 ms of data at 1000 MS/s. The diode is switched every eight frames,
and the off-state is zero signal (mid-scale samples). The test then turns
the linear polarization to the five positions 0, ±45 and ±90°, and checks
that:

- the gains are the inverse square root of the spectrum;
- the window cuts both band edges;
- the equalized band is flat within 10 %;
- at every angle, LHC and RHC agree within 2 % and their total stays
  constant within 2 %.

In practice the agreement is better than 0.1 %. The run takes about 3 s.

The unit testbenches check their module against an independent model in
the testbench: bit-exact for the data path, and within stated tolerances
for the square roots and divisions. `tb_pwr_accum` and `tb_eq_params` use
16 channels instead of 512. All others run at the full size.
