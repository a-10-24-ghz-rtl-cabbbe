# DRS4 spectrometer DSP: sideband-separating FX spectrometer in SystemVerilog

This design is the digital signal processing of a four-input, 10.24-GHz-wide
FX spectrometer for a two-sideband (2SB) millimetre-wave receiver. A 2SB
receiver delivers two IF signals, the lower sideband (LSB) and the upper
sideband (USB). An analog 90-degree hybrid separates them, but only to about
10-15 dB. The residual image of one sideband in the other is usually what
limits spectral-line work, because the image sideband brings atmospheric
noise with it. Here each IF is sampled at 20.48 GS/s with 3 bits and
Fourier-transformed into 512 channels of 20 MHz. The two spectra are then
recombined channel by channel with two programmable complex gains, C1 and
C2. This digital sideband separation (DSBS) cancels the image that the
analog hybrid left behind. After DSBS each spectrum is squared (auto
correlation), converted to 32-bit floating point and integrated for
100 ms, 200 ms, 500 ms or 1 s. It then leaves as a time-stamped VDIF frame.

A second mode helps find the right gains. In calibration mode the sidebands
are not combined. The instrument instead reports both auto spectra and the
USB x LSB cross spectrum, and the gains follow from these by a division per
channel on the host.

The four analog inputs form two LSB/USB pairs:

| inputs | band | RTL |
|---|---|---|
| 1 (LSB), 2 (USB) | DC - 10.24 GHz, first Nyquist zone | `adc_code[0]`, `adc_code[1]`, pair 0 |
| 3 (LSB), 4 (USB) | 10.24 - 20.48 GHz, second Nyquist zone | `adc_code[2]`, `adc_code[3]`, pair 1 |

The second pair samples its band directly in the second Nyquist zone, with
no downconverter. Its spectrum therefore comes out mirrored: channel k of
pair 1 holds sky frequency 20.48 GHz - k x 20 MHz. For example, a tone at
18.48 GHz appears in channel 100, the "2.00 GHz" channel. The RTL does not
reorder these channels. The reader of the data must know the mapping.

## Signal path of one pair

```
adc_usb --> fft_window --> fft_r2sdf --+---------------------------+
 3 bit       12 bit         28 bit     |     dump_ctrl (tags)      |
adc_lsb --> fft_window --> fft_r2sdf --+                           |
                                       v                           v
                          dsbs (C1, C2 tables, 34 bit complex out)
                             |                  |
                power_detect (USB)   power_detect (LSB)   cross_corr (cal. mode)
                    53 bit                53 bit          53 bit re + 53 bit im
                     |                     |                |          |
             spec_integrator       spec_integrator   spec_integrator x2
             (float32 sums)            ...                ...
                     \_____________________|________________|__________/
                                           v
                                      vdif_framer --> 32-bit VDIF word stream
```

`drs4_pair` is this chain. `drs4_top` holds two pairs and the shared time
stamp unit `timestamp_1pps`. All shared types and constants, and the
floating-point functions, are in `drs4_pkg`.

Widths at each block output. The widths of the specification are in the
first column.

| point | specified | here |
|---|---|---|
| ADC | 3 bit | code 0..7 mapped to the odd level 2c-7 (-7..+7) |
| window | - | 12-bit signed product, weight 1.0 = 256 |
| FFT | 28 bit | 14 + 14 bit complex, rounded and saturated |
| after DSBS "+" | 34 bit | 17 + 17 bit complex |
| ( )^2 and cross | 53 bit | unsigned power, or signed real and imaginary parts |
| integrated | 32 bit | IEEE-754 single precision |

### Samples, clocks and lanes

The RTL processes one sample per input per clock while `adc_valid` is
high. Real hardware at 20.48 GS/s has to spread this over many parallel
lanes, for example a parallel FFT and an integrator per lane group. That
parallel structure is not specified and is not built here. All block
functions, widths, frame sizes and dump lengths are those of the
instrument. Only the throughput per clock differs. Dump lengths are
counted in FFT frames, not in clocks, so they do not depend on the clock
rate.

## Sideband separation and gain calibration

The observation-mode combination per channel k is (module `dsbs`):

```
Y_USB[k] = X_USB[k] + C2[k] * X_LSB[k]
Y_LSB[k] = X_LSB[k] + C1[k] * X_USB[k]
```

C1 scales the USB spectrum into the LSB output. A USB signal that leaks
into the LSB IF as X_LSB = a * X_USB cancels from Y_LSB when C1 = -a.
Likewise C2 = -b cancels an LSB signal that leaks into the USB IF as
X_USB = b * X_LSB.

In calibration mode the gains only scale, and nothing is added:

```
Y_USB[k] = C1[k] * X_USB[k]        Y_LSB[k] = C2[k] * X_LSB[k]
```

With both gains left at their reset value 1 + 0j, the pair outputs four
spectra per dump:

- |X_USB|^2 and |X_LSB|^2 (`power_detect`)
- R = X_USB * conj(X_LSB), as its real and imaginary parts (`cross_corr`)

The host measures with a CW reference tone. It sweeps the tone over the
channels of interest, once in the USB and once in the LSB, and computes:

```
C1[k] = -conj(R[k]) / |X_USB[k]|^2      (tone in the USB)
C2[k] = -R[k]       / |X_LSB[k]|^2      (tone in the LSB)
```

It then writes these into the gain tables.

The gain tables are two 512 x 32-bit memories per pair. Each entry is
16-bit real and 16-bit imaginary two's complement with 14 fraction bits,
so 1.0 = 16384 and |C| < 2. To write an entry, hold `cg_we` for one clock
with `cg_pair`, `cg_sel` (0 = C1, 1 = C2), `cg_addr` (the channel) and
`cg_val`. After reset each pair fills both tables with 1 + 0j, one entry
per clock, and holds `init_busy` high for those 512 clocks. Products are
rounded to nearest after the 14-bit shift. The 17-bit sums cannot overflow
for |C| < 2 and 14-bit FFT outputs.

The mode (`mode_sel`) is latched at the start of an integration and
travels with the data in a tag. An integration is therefore always either
wholly observation or wholly calibration. The cross-correlation
integrators run only in calibration mode. In observation mode a pair sends
two VDIF frames per dump; in calibration mode it sends four.

The `tb_dsbs` and `tb_drs4_pair` testbenches show the effect. A USB tone
leaks into the LSB IF with a = 0.3 - 0.2j, about -9 dB. With C1 = -a
loaded, `tb_dsbs` finds only rounding residue left in Y_LSB. Run end to end
through window, FFT and integration, `tb_drs4_pair` measures the leaked
tone about 38 dB below the USB power; the test requires at least 20 dB.

## The FFT: single-path delay-feedback pipeline

`fft_r2sdf` is a streaming 1024-point radix-2 FFT built from ten
`fft_sdf_stage` instances (decimation in frequency). Stage s has a delay
line of 512 / 2^s complex words. During the first half of each
2 x delay-length block, inputs are parked in the delay line. Meanwhile the
differences left from the previous block are sent on, multiplied by their
twiddle factor. During the second half the butterfly runs: the sum goes
on, and the difference goes back into the delay line. Twiddle tables (cos
and -sin, 18 bits, 1.0 = 2^16) are computed during elaboration with
`$cos`/`$sin`. They are not read from a file.

Things to know when you use it:

- **Output order.** Bins come out in bit-reversed order: the i-th output
  of a frame is bin bitrev10(i). Rather than reorder them, the FFT gives
  the bin number on `out_bin`. All later blocks work per bin, and the
  integrators address their memories by channel, so no reorder buffer is
  needed. The integrators read spectra out in natural channel order.
- **Scaling.** The datapath is 24 bits wide with no scaling between
  stages. At the output the 8 window fraction bits are removed with
  rounding, and each component is saturated to 14 bits. With the rectangle
  window the output is the exact DFT of the ADC levels, up to twiddle
  rounding: |X| <= 7 x 1024 < 2^13. The testbench checks this against a
  reference DFT to within 2 LSB.
- **Latency.** The first bin of a frame appears 1035 clocks after the
  first sample of that frame enters the window: 1 clock in the window,
  1023 samples, 10 stage registers and the output register. A frame's
  output is pushed out by the samples of the next frame. The input must
  keep streaming, and it does in a spectrometer.
- **Real input.** Bins 512..1023 mirror bins 0..511 and are dropped by
  `dump_ctrl`. This is where 1024 points become 512 channels.

## Windows

`fft_window` maps each ADC code to its level and multiplies the level by a
9-bit coefficient for its position n in the 1024-sample segment:

- rectangle: 256
- Hamming: round(256 (0.54 - 0.46 cos(2 pi n / 1024)))
- Hanning: round(256 (0.5 - 0.5 cos(2 pi n / 1024)))

The tables are computed during elaboration. `win_sel` is sampled at the
first sample of each segment. Segments are counted from the first valid
sample after reset.

## Integration and dumping

`dump_ctrl` watches the USB FFT's output of a pair; both FFTs run in lock
step, which an assertion in `drs4_pair` checks. It keeps bins 0..511 and
attaches a tag to each kept sample. The tag holds:

- the channel number
- `first`: the sample belongs to the first frame of an integration
- `eoi`: the sample is the last one of the integration
- the mode

An integration is d/100 x `FRAMES_PER_100MS` frames, where d is the
dumping time in ms. `FRAMES_PER_100MS` defaults to 2 000 000, which is
100 ms at 20 000 frames per ms (20.48 GS/s / 1024). The dumping time
(`dump_sel`) and the mode are both latched at the start of each
integration.

`spec_integrator` converts each 53-bit sample to float32 and adds it to
its channel's float32 sum. Conversion and addition are package functions
(`int_to_fp32`, `fp32_add`) that round to nearest even. Denormals cannot
occur because the inputs are integers. The sums live in two banks of 512
words. One bank integrates while the other is read out:

- A sample reads its channel's sum, and the new sum is written back one
  clock later. The same channel returns only one frame later, so there is
  no hazard.
- Samples tagged `first` overwrite the sum instead of adding to it, so the
  banks never need a clearing pass.
- At `eoi` the banks swap. The finished bank is read out channel 0..511,
  one word per two clocks, on a valid/ready port.
- If an integration ends while the previous spectrum is still being read
  out, the sticky `overrun` flag of that integrator is set.

Reading out four spectra through one VDIF port takes about
4 x (8 + 2 x 512) clocks, about 4.1 frames. Any dump of more than a few
frames is therefore safe as long as the network side keeps up.

**Precision.** The order "square, convert to float32, then integrate" is
followed literally, so each channel accumulates one float32 addition per
FFT frame. Once a sum is 2^24 times larger than the values added to it,
the additions are lost. For a steady signal that happens after about
1.7 x 10^7 frames, and a 1 s dump has 2 x 10^7 frames. 500 ms and 1 s dumps
of a steady input therefore come out low, by up to roughly 15 % for 1 s,
and shorter dumps carry a small rounding bias. A design that needs exact
long dumps should add a short integer pre-accumulation before the float
conversion. Nothing in the interfaces would change.

## Time stamps and VDIF output

`timestamp_1pps` keeps the VDIF seconds count. The host loads the current
second from network time through `set_sec`/`set_sec_val`, referred to the
VDIF reference epoch on `ref_epoch`. Each rising edge of the external
`pps` advances it. `pps` goes through a two-flop synchroniser. Each dump
pulse (from pair 0; both pairs dump in the same clock) captures:

- the second
- the number of the spectrum within that second, which restarts at every
  PPS edge (for 100 ms dumps it runs 0 to 9)

These become the seconds and frame-number fields of every VDIF frame of
that dump.

`vdif_framer` turns each finished spectrum into one VDIF data frame: an
8-word header followed by the 512 float words, channel 0 first. Header
fields:

| word | bits | content |
|---|---|---|
| 0 | 31, 30, 29:0 | invalid = 0, legacy = 0, seconds from epoch |
| 1 | 29:24, 23:0 | reference epoch, frame number within the second |
| 2 | 31:29, 28:24, 23:0 | version 0, log2(channels) = 9, frame length = 260 (8-byte units, 2080 bytes) |
| 3 | 31, 30:26, 25:16, 15:0 | real data, bits per sample - 1 = 31, thread id, station id |
| 4-7 | | zero |

Thread id = 4 x pair + stream:

- 0 = USB power
- 1 = LSB power
- 2 = cross spectrum, real part
- 3 = cross spectrum, imaginary part

Streams are sent one whole frame at a time in that fixed priority. Each
stream latches the time stamp when its spectrum becomes ready. With very
short dumps, a cross spectrum can wait behind the next dump's auto spectra
and still carry the time of its own integration. The
output per pair is a 32-bit word stream with `vd_valid`/`vd_ready` and
start/end-of-frame marks. It is meant for a UDP/Ethernet packetiser, which
is not part of this RTL.

## Top-level ports (`drs4_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `win_sel` | in | `win_t` | rectangle, Hamming or Hanning |
| `dump_sel` | in | `dump_t` | 100, 200, 500 or 1000 ms |
| `mode_sel` | in | `mode_t` | observation or calibration |
| `cg_we`, `cg_pair`, `cg_sel`, `cg_addr`, `cg_val` | in | 1, 1, 1, 9, 32 | gain table write |
| `init_busy` | out | 2 | gain tables of a pair being initialised |
| `adc_valid` | in | 1 | one sample per input this clock |
| `adc_code[4]` | in | 3 each | ADC codes of inputs 1..4 |
| `pps` | in | 1 | 1 PPS, asynchronous |
| `set_sec`, `set_sec_val` | in | 1, 30 | load seconds from network time |
| `ref_epoch`, `station_id` | in | 6, 16 | VDIF header fields |
| `vd_valid`, `vd_ready`, `vd_data[2]`, `vd_sop`, `vd_eop` | out/in | per pair | VDIF word streams |
| `overrun` | out | 8 | sticky readout overrun, 4 integrators per pair |

Parameters: `NPAIR` (2) and `FRAMES_PER_100MS` (2 000 000).

Not in the RTL, and to be connected at these ports:

- the 3-bit 20.48 GS/s samplers and the sampling clock distribution
- the Ethernet interface with NTP and multicast
- the front panel display and buttons

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/drs4_pkg.sv tb/tb_drs4_top.sv --top-module tb_drs4_top -o sim
./obj_dir/sim
```

| testbench | what it checks against |
|---|---|
| `tb_fft_window` | level mapping and all three windows, computed independently |
| `tb_fft_r2sdf` | direct DFT of random and tone inputs; bin order; latency |
| `tb_dump_ctrl` | channel keep, tags and dump spacing for every dumping time |
| `tb_dsbs` | both equations in both modes, gain writes, reset values, image rejection |
| `tb_power_detect`, `tb_cross_corr` | exact integer products |
| `tb_spec_integrator` | bit-exact float32 model; bank swap; overrun |
| `tb_timestamp_1pps` | seconds, numbering and PPS edge cases |
| `tb_vdif_framer` | header fields, frame layout, priority, back-pressure, per-stream time stamps |
| `tb_drs4_pair` | floating-point model of the whole pair, calibration then observation |
| `tb_drs4_top` | both pairs end to end, as below |
| `tb_drs4_workloads` | laboratory measurements on the whole top, as below |

The end-to-end test `tb_drs4_top` runs five integrations. Together they
cover both modes, all three windows, all four dumping times, PPS second
changes and output back-pressure. It counts each of these events and fails
if one never happens. Every eighth channel of every VDIF frame of both
pairs is compared with a floating-point model.

`tb_drs4_workloads` repeats three laboratory measurements of the
instrument with synthetic 3-bit samples.

- **Frequency response.** A tone is swept in 2 MHz steps over
  5.00 GHz +- 200 MHz. Channel 250 follows the rectangle-window sinc^2
  response at every point. The half-power width comes out at 17.96 MHz;
  the theoretical value is 17.72 MHz, or 0.886 of a channel. The response
  one channel away is -40 dB.
- **Higher-order sampling.** A tone at 18.48 GHz on input 4 lands in
  channel 100 of pair 1, the "2.00 GHz" channel. Its on-minus-off power
  scales with the tone power over 18 dB.
- **Total power.** Band-limited noise in 0.5-2.5 GHz is stepped over
  12 dB. The summed output equals the power of the quantised samples
  (Parseval) within 0.5 %. The test prints how closely the in-band output
  follows the input. The 3-bit quantiser bends this curve: small inputs
  are amplified, large ones clipped.

- **Gain calibration.** This follows the procedure described above on
  pair 0. A 3.00 GHz USB tone leaks into the LSB IF at -9 dB, and a
  7.00 GHz LSB tone leaks into the USB IF at -12 dB. One calibration-mode
  integration with unit gains is recorded, and C1 and C2 are computed
  from it by the formulas above. The computed gains land within 0.03 of
  the true leakage. After they are written, the images measure -31 dB and
  -35 dB, an improvement of about 22-24 dB. In this simple model the limit
  comes from noise and 3-bit quantisation; in a real receiver it comes
  from the analog front end.

**Largest simulated size.** A single 100 ms dump at the default parameters
is 2 x 10^9 sample clocks, too long for simulation. The end-to-end test
therefore overrides `FRAMES_PER_100MS` to 5, and the workload test to 3.
All other parameters,
including the 1024-point FFT, the 512 channels and both pairs, are at
their defaults. No test runs the top with every parameter at its default.

## Where this RTL departs from, or adds to, the instrument description

- **Own choices.** These things are not specified, and are this design's
  own choices:
  - one sample per clock instead of parallel lanes
  - the ADC level mapping
  - the window coefficient precision
  - the SDF FFT architecture and its internal widths and rounding
  - the gain format and the gain write port
  - the float rounding mode
  - the double-buffered integrator
  - the VDIF thread numbering and header filling
  - the time-stamp numbering within a second
- **28 bits, read as 14 + 14.** The 28-bit FFT output is taken as 14 + 14
  bit complex, and the 34-bit DSBS output as 17 + 17. The 53-bit products
  are wider than the values they hold need.
- **Pair 1 spectrum is mirrored.** Its channels are not reversed in
  hardware (see the band table above).
- **Long dumps lose precision.** This follows from float32 integration
  per frame (see "Precision").
- **Gain calculation is off-chip.** Calibration gains are computed by the
  host from the calibration-mode spectra. The RTL provides only the
  measurement mode and the table write port.
