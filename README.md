# Frequency-multiplexed KID readout: NCO/IFFT tone synthesis to Ethernet records

A kinetic inductance detector (KID) is a superconducting microwave resonator whose
resonance shifts and deepens when light is absorbed. Thousands of them hang on
one feedline, each tuned to its own frequency. One readout therefore sends a
comb of up to 4000 probe tones down the line, digitises what comes back, and
watches the amplitude and phase of every tone. A photon hitting a detector
shows up as a short dip in its tone's transmission that recovers exponentially.

This RTL is the FPGA part of such a readout, from the probe comb to science
records on gigabit Ethernet:

```
 host tables ──► NCO ──A──► frame builder ─► IFFT ─► reorder ─► synthesis WOLA ─► DAC
                  ▲  └──B──────────────┐
       retune     │                    ▼
   ┌──────────────┘   ADC ─► analysis WOLA ─► FFT ─► bin select ─► DDC ──┐
   │                                                                      │
 tone tracking ◄──────────────────────────────────────────────────────────┤
   │                                                                      ▼
   │                   pulse tracking ◄── pulse detector ──► cosmic-ray infill
   │                        │             (baseline, matched        │
   │                        │              filter, threshold)       ▼
   │                        │                              vector accumulate
   ▼                        ▼                                       ▼
 power records        pulse records (photon mode)     vector records (imaging mode)
   └───────────────────────────► record mux ─► Ethernet MAC ─► GMII bytes
```

The central idea is that **one table of numerically controlled oscillators drives
both directions**. The same per-tone phase is used to synthesise the tone and,
one FFT frame later, to downconvert it. The tone can therefore be moved at any
time, by the host or by the tone-tracking loop, and the downconverter follows
with no extra bookkeeping.

## Clocking and number formats

Everything runs at one converter sample per clock. A frame is `N = 2^LOG2N`
samples (4096 by default), so one clock carries one FFT bin.

A flight implementation at several GS/s would make the datapath several samples
wide at a lower clock. That is not built here.

Number formats:
- Data words are 24-bit signed (`DW`), and complex values are `{re, im}` structs.
- Coefficients and phasors are Q1.14 in 16 bits.
- Tone numbers are 12 bits.

Shared types live in `kid_pkg`:
- `cplx_t`, `phasor_t`, `det_sample_t`;
- the 64-bit `record_t`;
- the run-time settings struct `kid_cfg_t`.

Defaults: 4000 tones, 4096-point FFT, 12-bit DAC and ADC.

## The oscillator table (`nco`)

Each tone has these entries:
- an FFT bin;
- a 32-bit phase step per frame (a fractional bin offset: the tone sits at `bin + freq/2^32` bins);
- an amplitude;
- a 16-bit retune offset;
- a 16-bit calibration phase.

Port A is read once per tone per frame by the transmit side. It returns `amp` and
`cos/sin(phase)` from a 1024-entry table, then advances the phase by
`freq + (ofs << 8)`.

Port B is read by the receive side. It returns the phasor of `phase + cal`.

The calibration phase absorbs each tone's delay round the analog loop. The host
measures the I/Q of each tone once and writes its angle. After that every tone
comes out of the downconverter on the +I axis, so a detector dip is a negative
step in I for all tones. A write to a tone's table entry clears its phase, offset
and calibration. A tone never written has amplitude 0.

## Transmit: frame builder, IFFT, reorder, synthesis filterbank

`ifft_frame_builder` asks the NCO for all tones in turn and writes
`amp × phasor >>> 7` into the tone's bin of a ping-pong frame buffer. It then
streams the other half in natural bin order, clearing it as it reads. The
output starts after two frames, once both halves are clean.

`fft_sdf` is a streaming radix-2 decimation-in-frequency FFT, built as a
single-path delay-feedback pipeline of `LOG2N` stages:
- Each stage halves the data, so the transform is scaled by 1/N.
- The twiddles are computed at elaboration with `$cos/$sin`.
- `INVERSE` conjugates the twiddles.
- The output is in bit-reversed order. Each output carries its natural bin number in `out_bin`.
- The latency is N + LOG2N clocks.

`frame_reorder` puts the IFFT output back in time order. Only the real part goes
on, because the DAC is real.

`wola_pfb` (synthesis) overlap-adds `TAPS` windowed copies of the periodic
frame: `y[n] = Σ_j h[j·N+n] · x_{frame−j}[n]`. The result is saturated to 12 bits
for the DAC.

## Receive: analysis filterbank, FFT, bin selection, downconversion

The 12-bit ADC sample is shifted up by `ADC_SHIFT` bits. `wola_pfb` (analysis,
`REVERSE=1`) then folds `TAPS·N` input samples into one frame with the same
window, so every FFT bin becomes a narrow channel with low far sidelobes.
`pfb_coeff_mem` holds that one window (`TAPS·N` Q1.14 values written by the host)
and serves both filterbanks through two read ports.

`bin_select` stores each FFT frame in a ping-pong buffer addressed by bin. When
the frame is complete it walks the tones 0..NTONES−1 through NCO port B. For each
tone it reads the stored bin and passes it on with the tone's phasor. A frame must
be at least NTONES+2 clocks long: 4000 tones fit in a 4096-clock frame.

`ddc` multiplies by the conjugate phasor. It then sums `dec_ratio` frames per tone
and scales the sum by `dec_recip/65536`. With a 4.096 GS/s converter, frames come
at 1 MHz and `dec_ratio = 100` gives the 10 kHz detector rate.

## Detector processing

**Tone tracking** (`tone_tracking`):
- Keeps an exponential running average of each tone's power, `P = (I²+Q²)>>16`, over `2^avg_shift` samples. At 10 kHz, 16 samples is 1.6 ms.
- With `track_en` set, it writes a retune offset `clamp((P − P_ref)·gain >>> gain_shift)` back to the NCO on every sample.
- In discrete mode the offset is rounded down to steps of `2^step_log2`.
- Every `report_div` detector frames it emits a power record `{P, offset}` per tone.
- The retune rule itself is a placeholder. The host sets `P_ref` and `gain` for whatever rule is chosen.

**Pulse detector** (`pulse_detector`):
- Takes I (or Q with `use_q`) of each tone.
- Removes a baseline, an exponential average with `2^bl_shift` samples that is frozen during a pulse.
- Runs an `MF_TAPS`-tap matched filter with one template shared by all tones.
- A pulse lasts while the filter output exceeds `threshold`.
- Start, in-pulse and end flags go downstream.
- Since dips are negative in I after calibration, the template is negative.

**Pulse tracking** (`pulse_tracking`) is the photon-counting endpoint. For each pulse
it emits one record: `{start time (detector frames), peak filter output >>> 8,
width in samples}`.

**Cosmic-ray rejection** (`cosmic_ray_rejection`) is used in imaging mode. It replaces
every in-pulse sample by the mean of the last `MA_LEN` out-of-pulse samples of that
tone.

**Vector accumulate** (`vector_accumulate`) then averages I and Q over `2^acc_log2`
detector frames and emits one `{I, Q}` record per tone per window.

`cfg.mode` selects the science output: pulse records in `MODE_PHOTON`, vector
records in `MODE_IMAGING`. Power records are sent in both modes when
`report_div ≠ 0`.

## Records and the Ethernet link

Every record is 64 bits: `{type[4], tone[12], data[48]}`.

| type | data |
|---|---|
| 1 pulse | start time [47:24], peak [23:8], width [7:0] |
| 2 power | average power [47:16], retune offset [15:0] |
| 3 vector | I average [47:24], Q average [23:0] |

`record_mux` has one FIFO per record type:
- The default depths are 64 for pulse and 4096 each for power and vector.
- A fixed-priority arbiter serves pulses first, then power, then vectors.
- An offered record is held until it is taken.
- A record that arrives at a full FIFO is dropped and counted in `drops[type]`.

`gbe_mac_tx` sends one byte per `byte_en` (the 125 MHz GMII byte clock). Each frame is:
- preamble and start delimiter;
- destination and source MAC;
- EtherType 0x88B5;
- a 16-bit sequence number;
- up to `MAX_RECS` records, most significant byte first;
- zero padding to the 46-byte minimum (type 0 marks the end);
- CRC-32.

The transmitter then keeps the 12-byte inter-frame gap.

Link budget:
- A full imaging timestream of 4000 tones at 10 kHz would be 320 MB/s, more than gigabit Ethernet carries.
- `acc_log2 ≥ 2` brings it to 80 MB/s of payload, about 93 MB/s on the wire.
- Power reports for 4000 tones likewise need `report_div ≥ 3` at 10 kHz.

## Host interface of the top (`kid_readout_top`)

| port | use |
|---|---|
| `cfg` (`kid_cfg_t`) | mode, decimation, averaging, tracking, threshold, accumulation settings |
| `nco_we/tone/bin/freq/amp` | tone table |
| `cal_we/tone/phase` | downconversion calibration per tone |
| `coef_we/addr/data` | window, address `m·N+n` |
| `tmpl_we/addr/data` | matched filter template |
| `pref_we/tone/data` | tone tracking reference power |
| `dac_data`, `dac_valid`, `adc_data` | 12-bit converter samples, one per clock |
| `gmii_byte_en`, `gmii_txd`, `gmii_tx_en` | Ethernet byte stream to a PHY |
| `frames_sent`, `drops`, `timestamp` | status |

Bring-up sequence:
1. Write the window and the tones.
2. Let about `TAPS + 6` frames pass.
3. Read each tone's I/Q from the DDC output and write `atan2(Q, I)` as its calibration phase.
4. Write `P_ref` from the now-settled power.
5. Set the threshold and the mode.

The test benches do exactly this.

## What is not here

These are outside the RTL. The top brings their signals out as ports.
- The converters (a 6.4 GS/s 12-bit DAC and a 10.5 GS/s 12-bit ADC).
- Their LVDS/SERDES links.
- The analog RF chain and detectors.
- The Ethernet PHY.
- The spacecraft computer.

Design choices of this RTL, not taken from an outside description:
- the window length (`TAPS = 4`);
- all word widths;
- the FFT architecture;
- the pulse characterisation (peak, width, start time);
- the retune rule;
- the record layout and frame format.

Known limitations:
- There is no sweep sequencer for VNA-style frequency sweeps. The host performs a sweep by stepping the tone table's frequencies and reading the power records.
- The datapath is one sample per clock, so real-time operation at GS/s rates needs a parallel version of the filterbank, FFT and bin selection.

## Verification

Each module has a self-checking testbench in `tb/` that compares against a
model computed in the testbench. Each prints `TB_RESULT checks=… failures=…` and
has a watchdog.

Two testbenches cover the whole chain, closed through `kid_loopback_model`, a
loop model with delay, exponential detector dips and noise:

- `tb_kid_readout_top` runs a 64-point FFT with 8 tones, and takes about a second. It covers:
  - calibration (all tones locked on +I);
  - photon counting, with exactly one pulse record per tone per injected pulse and increasing timestamps;
  - power reports, continuous retuning and discrete retuning on the step grid;
  - imaging mode, with infill, vector records, no pulse records and infilled averages close to the baseline;
  - queue overflow with the link stalled, counted drops and resumed traffic;
  - Ethernet frames with a good CRC, matching `frames_sent`.

  It prints the count of each mechanism.
- `tb_kid_readout_full` runs the top with every parameter at its default (4096-point FFT, 4000 slots). It covers:
  - 33 tones spread over the table, including slot 3999;
  - even tone amplitudes;
  - no DAC clipping;
  - calibration;
  - power records for every tone over Ethernet.

To run one with plain Verilator from the repository root (`-Wno-fatal` because at
reduced sizes the tone index is wider than the per-tone arrays, which Verilator
reports as width warnings):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/kid_pkg.sv tb/tb_kid_readout_top.sv --top-module tb_kid_readout_top
./obj_dir/Vtb_kid_readout_top
```
