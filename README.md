# Calibrated digital sideband-separating spectrometer

A sideband-separating (2SB) heterodyne receiver delivers the lower and the
upper sideband of the sky signal on two separate outputs. In the classic
analog version, a 90-degree RF hybrid, two mixers and a 90-degree IF hybrid do
the separation. Any gain or phase mismatch between the two mixer/amplifier
chains lets part of each sideband leak into the other output, and wideband
receivers rarely reach more than 10 to 20 dB of sideband rejection ratio
(SRR).

This design drops the analog IF hybrid. The two mixer outputs are digitised
directly, each stream is split into frequency channels by a polyphase filter
bank, and the IF hybrid is applied channel by channel as a complex linear
combination. The four complex weights of each channel are not fixed at their
ideal values: they are measured and loaded so that they also cancel the
gain and phase error of the analog chains *at that frequency*. A digital
hybrid calibrated this way reaches SRRs 20 to 30 dB better than an analog
one. After the hybrid, each sideband is squared and integrated, so the
design is a complete two-sideband power spectrometer.

The RTL follows the published instrument: two 8-bit ADC streams, 18-bit
2048-channel polyphase filter banks, per-channel calibration constants C1 to
C4, a power detector and a 64-bit accumulator per sideband, and a run-time
accumulation length and run-time constants. Where the publication does not
say how a block is built, this RTL makes its own choices. These are listed
in [Departures and own choices](#departures-and-own-choices).

## Signal chain

```
 adc0 ──► pfb (FIR + FFT) ──X1──┬──► C1 ─┐
                                ├──► C3 ─┼─┐
 adc1 ──► pfb (FIR + FFT) ──X2──┼──► C2 ─┘ │      LSB = C1·X1 + C2·X2
                                └──► C4 ───┘      USB = C3·X1 + C4·X2
                                   sideband_hybrid
        LSB ──► power_detect ──► vector_accumulator ──► spec_lsb
        USB ──► power_detect ──► vector_accumulator ──► spec_usb

 X1, X2 ──► cal_snapshot (even channels, for calibration)
 host bus ──► ctrl_regs ──► ACC_LEN, FFT_SHIFT, C1..C4 writes, capture
```

| module | role |
|---|---|
| `dsbs_pkg` | widths, complex types, saturation and bit-reverse helpers |
| `pfb_fir` | polyphase FIR, 4 taps, 4096-sample frames |
| `fft_sdf_stage` | one radix-2 delay-feedback FFT stage |
| `fft_sdf` | 4096-point streaming FFT (12 stages) |
| `pfb` | FIR + FFT for one real stream, keeps the 2048 positive-frequency channels |
| `sideband_hybrid` | per-channel C1..C4 RAMs, two complex multiply-adds |
| `power_detect` | re² + im² |
| `vector_accumulator` | 2048 × 64-bit integration, streaming dump |
| `cal_snapshot` | records X1, X2 of the 1024 even channels of one spectrum |
| `ctrl_regs` | host register file |
| `dsbs_top` | the whole back end |

## How the digital hybrid separates the sidebands

Think of one channel k and a single tone in it. After the filter banks, the
two branches hold complex values X1 and X2. In a front end with perfect
quadrature, a tone in one sideband gives X2 = −j·X1 and a tone in the other
gives X2 = +j·X1. With C1 = C4 = 1 and C2 = C3 = j:

* tone with X2 = −j·X1: LSB = X1 + j(−jX1) = 2X1, USB = jX1 − jX1 = 0;
* tone with X2 = +j·X1: LSB = X1 + j(jX1) = 0, USB = 2jX1.

This ideal hybrid is what the coefficient RAMs hold after power-up. In a
real front end, branch 2 has a gain error G and a phase error φ, both
depending on frequency. For the first tone, X2/X1 = −jG·e^{jφ} and the ideal
hybrid lets |1 − G·e^{jφ}|² / |1 + G·e^{jφ}|² of the power through to the
wrong output. With G = 0.8 and φ = 12° that is only about 16 dB of
rejection.

Calibration measures, for each channel, the ratio r = X2/X1 with a test tone
placed first in one sideband and then in the other. It then chooses
constants that put a zero exactly where the unwanted tone is:

* keep C4 = 1 and set C3 = −r_LSB, so the LSB tone cancels in USB;
* keep C1 = 1 and set C2 = −1/r_USB, so the USB tone cancels in LSB.

The ideal hybrid is the special case r_LSB = −j, r_USB = +j. Finding the
ratios (tone sweeps, then interpolating between the measured even channels to
get the odd ones) is done by host software. The hardware supplies two
things: `cal_snapshot` records the raw complex filter-bank outputs of the
1024 even channels of one spectrum, and `ctrl_regs` lets the host write any
constant of any channel while the spectrometer runs. All four constants are
writable, so C1 and C4 do not have to stay at 1.

Which physical sideband lands on the `lsb` output depends on how the front
end is wired (which mixer is branch 1 and the sign of its quadrature). The
testbench uses the convention above: branch 1 = A·cos, branch 2 = +A·sin for
the tone that must appear on `lsb`.

## Polyphase filter bank

Each `pfb` turns one real 8-bit stream into 2048 complex 18-bit channels per
4096 samples, covering 0 to half the sample rate.

**FIR (`pfb_fir`).** The stream is cut into 4096-sample frames. Each output
sample at frame position p is the sum of four products: the current sample
and the samples at position p of the three previous frames, weighted by the
four matching 4096-point segments of a 16384-point window. The window is a
sinc, one channel wide, multiplied by a Hamming taper:

    h[n] = sinc((n − 8192)/4096) · (0.54 − 0.46·cos(2πn/16384)),   n = 0..16383

The window is quantised to 18 bits with 17 fraction bits and computed in
SystemVerilog at initialisation (an FPGA ROM initialiser). No table file is
read. The output gain is 2^10, so a full-scale 8-bit sample fills the 18-bit
word. Results are rounded half-up and saturated. Three 4096 × 8-bit RAMs hold
the frame history.

**FFT (`fft_sdf`, `fft_sdf_stage`).** The FFT is a radix-2,
decimation-in-frequency, single-path delay-feedback pipeline. Stage s has a
delay line of 4096/2^(s+1) samples and works on blocks of twice that length:

1. During the first half of a block, the incoming samples fill the delay
   line. The values leaving the line are the differences of the previous
   block, rotated by exp(−j2πk/(2D)).
2. During the second half, each incoming sample b meets the sample a from
   one half-block earlier. The sum a+b leaves at once and the difference a−b
   goes into the delay line.

One sample enters per clock and one bin leaves per clock, with no pauses, so
the FFT runs indefinitely on a continuous stream. Bins come out in
bit-reversed order. Instead of spending another 4096-word buffer to reorder
them, each bin carries its natural number (`out_bin`), and every later block
addresses its RAMs by that tag. The real input goes in as the real part and
the imaginary part is zero. `pfb` drops the 2048 mirror bins, so one channel
leaves every other clock.

**Scaling.** Each stage may halve its butterfly outputs (rounded). The
`FFT_SHIFT` register holds one bit per stage, stage 0 in bit 0. Its reset
value is all ones, a total scale of 1/4096. With that setting, a full-scale
bin-centred tone gives a channel amplitude of about 2^16. Every stage
saturates, and twiddles are 18 bits with 17 fraction bits.

## Integration and read-out

`vector_accumulator` keeps one 64-bit sum per channel. An integration spans
`ACC_LEN` spectra. In the first spectrum of an integration, each channel's
old sum, which is the finished result of the previous integration, is sent
out and replaced by the new power. In later spectra the power is added. The
output therefore needs no second buffer and no read-out pause:
a dump of 2048 words per sideband comes out every `ACC_LEN` × 4096 clocks,
spread over one spectrum time. `ACC_LEN` is latched at the start of each
integration, so the host can rewrite it at any moment. Nothing is sent out
until the first full integration after reset has finished.

The 42-bit power values can be added 2^22 times before a 64-bit sum could
overflow at full scale.

## Host register map (`ctrl_regs`)

Word addresses on a 16-bit address, 32-bit data bus. A write takes one clock.
A read returns `rd_data` with `rd_valid` one clock after `rd_en`.

| address | name | access | meaning |
|---|---|---|---|
| 0x0000 | ACC_LEN | rw | spectra per integration (reset 1024; 0 acts as 1) |
| 0x0001 | FFT_SHIFT | rw | per-stage halving mask of both FFTs (reset 0xFFF) |
| 0x0002 | COEF_RE | rw | staged real part (18-bit signed) for the next coefficient write |
| 0x0003 | CAL_CTRL | w / r | write bit 0 = 1: arm capture; read: {busy, done} |
| 0x0004 | DUMP_COUNT | r | integrations dumped since reset |
| 0x2000–0x3FFF | COEF | w | bits 12:11 select C1..C4, bits 10:0 the channel; `wr_data[17:0]` is the imaginary part. The write stores {COEF_RE, data} |
| 0x4000–0x4FFF | CAPTURE | r | bit 11 = branch (0: X1, 1: X2), bits 10:1 = k/2, bit 0 = real / imaginary; sign-extended |

Calibration constants are signed 18-bit with 16 fraction bits, so their
components range from −2 to just under +2, and 1.0 = 0x10000. Loading one
constant takes two writes, so reloading C2 and C3 for all channels takes
8192 bus writes.

## Timing and formats

| item | value |
|---|---|
| input | one 8-bit two's-complement sample per stream per clock (`adc_valid`) |
| FIR latency | 1 clock |
| FFT latency | 4095 + 12 clocks from a frame's first sample to its bin 0 |
| spectrum period | 4096 clocks, 2048 channels, one every other clock |
| hybrid latency | 2 clocks |
| power latency | 1 clock |
| accumulator latency | 1 clock; dump period `ACC_LEN` × 4096 clocks |
| filter-bank data | complex 18 + 18 bit |
| hybrid output | complex 21 + 21 bit (full precision, saturation only at the extreme corner) |
| power | 42 bit unsigned |
| accumulator | 64 bit unsigned |

Gaps in `adc_valid` stall the whole chain cleanly, since every block advances
only on valid data. The two filter banks share one `adc_valid` and run in lock
step; an assertion in `dsbs_top` checks this.

## Departures and own choices

Taken from the published design: the block diagram (two filter banks, C1..C4
and two adders, power, 64-bit accumulation per sideband), 8-bit samples, an
FIR-plus-pipeline-FFT filter bank with 2048 channels and 18-bit data and
coefficients, the ideal-hybrid values, per-channel complex constants loadable
at run time, a run-time accumulation length, and the recording of the
even-channel complex outputs for calibration.

Chosen here, because the publication does not describe them:

* **Clock rate and parallelism.** The instrument sampled at 1 GSPS, which an
  FPGA can only follow by handling several samples per clock. This RTL handles
  one sample per stream per clock. Real-time operation at 1 GSPS would need a
  1 GHz clock or a multi-lane filter bank, which is not included.
* **Filter-bank internals.** The original used a library filter bank whose
  structure is not given. Taps (4), window (Hamming-weighted sinc), FFT
  architecture (radix-2 SDF), overflow handling (per-stage shift mask,
  rounding, saturation) and the bit-reversed output order are choices made
  here. Results therefore differ in the last bits from any other
  implementation.
* **Coefficient format and width**, hybrid output width, power width.
* **Accumulator read-out** (dump-on-first-spectrum streaming) and the output
  port carrying the dumps. How spectra travel to the host over the network
  is outside this RTL.
* **Host bus and register map.**
* **Calibration capture.** The instrument used a separate FPGA configuration
  for this measurement. Here `cal_snapshot` sits beside the spectrometer in
  the same design, and it captures one spectrum per arm.
* All four constants are writable, not only C2 and C3.

Not in the RTL: the analog front end (RF hybrid, mixers, LO, filters,
amplifiers), the ADCs, and the host software that computes the constants.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it checks |
|---|---|
| `tb_pfb_fir` | every output against a floating-point polyphase FIR built from its own window (±3 LSB), zero history after reset, latency, frame sync, input gaps |
| `tb_fft_sdf` | 64-point FFT against a direct DFT, scaled (1/N) and unscaled runs, random input gaps, each bin once per frame, latency N−1+log2 N |
| `tb_pfb` | full 2048-channel bank with a bin-centred tone: peak channel and amplitude, > 40 dB leakage suppression two channels away, 4096-clock spectrum period, first-spectrum latency |
| `tb_sideband_hybrid` | ideal power-up hybrid and random per-channel constants written during streaming, bit-exact against 64-bit integer arithmetic, 2-clock latency |
| `tb_power_detect` | bit-exact squares including range corners |
| `tb_vector_accumulator` | per-channel sums over changing `ACC_LEN`, gaps, shuffled channel order, dump count |
| `tb_cal_snapshot` | arm in mid-spectrum, capture of the next full spectrum, busy/done, read-back, no overwrite until re-armed |
| `tb_ctrl_regs` | reset values, read-back, coefficient write pulses, arm pulse, status and capture reads |
| `tb_dsbs_top` | the whole design at full size, described below |
| `tb_srr_sweep` | per-channel calibration and SRR measurement over 512 channels of the full-size design, described below |

`tb_dsbs_top` runs the complete design with default parameters. It models a
front end with one tone in each sideband (channels 300 and 700) and acts as
the host:

* **Balanced front end, ideal hybrid.** Measured SRR is above 80 dB. No ADC
  noise or spurs are modelled, so this figure is far above what real hardware
  can reach.
* **Front end with G = 0.8 and φ = 12°.** SRR drops to 16.3 dB, as the
  formula above predicts. The host arms the capture, checks the captured
  ratios X2/X1 against the imposed error, and compares the next dump
  bit-exactly with the powers computed from the captured values. It then
  derives C2 and C3 and writes them to all 2048 channels while data flows.
* **After calibration, with `ACC_LEN` changed from 2 to 3.** SRR returns to
  above 95 dB, the dump period becomes 3 × 4096 clocks, and the dumps are
  again bit-exact.

The whole run takes about 10 s to build and simulate.

`tb_srr_sweep` repeats the calibration procedure channel by channel, the way
the instrument is calibrated. Branch 2 gets a gain and phase error that vary
with frequency: G from 0.75 to 0.95, and φ = 8° plus a slope of 0.02° per
channel. For each even channel of a 512-channel band, the host places a tone
in each sideband in turn, captures it, and forms X2/X1. For the odd
channels it interpolates between the neighbouring even channels. After the
constants are written, the SRR of every channel is measured with one
integration per tone. Uncalibrated channels reach 16 to 17 dB. Calibrated
channels reach about 100 dB where the ratio was measured and at least
57 dB where it was interpolated. The simulation takes about 90 s.

To simulate with Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert --top-module tb_dsbs_top \
    rtl/dsbs_pkg.sv $(ls rtl/*.sv | grep -v dsbs_pkg) tb/tb_dsbs_top.sv
./obj_dir/Vtb_dsbs_top
```

Replace `tb_dsbs_top` by another testbench name to run a single block. The
window and twiddle tables use `$sin` and `$cos` in `initial` blocks. This is
fine for simulation and for FPGA ROM initialisation, but some synthesis
front ends do not accept real arithmetic there and would need the tables
precomputed.

## Changing the design

* `FFT_N` (top) / `N` (filter bank) sets the transform size; the channel
  count is `FFT_N/2`. Sizes 64 (FFT testbench) and 4096 are simulated. The register map's
  11-bit channel fields cover up to 2048 channels.
* `TAPS` sets the FIR length in frames.
* `ACC_LEN_RST` is the accumulation length after reset.
* Widths are in `dsbs_pkg`. `DATA_W` and `TWID_W` follow the 18-bit filter
  bank. `HYB_W` and `PWR_W` follow from them, and `CAL_FRAC` sets the
  coefficient scale.
