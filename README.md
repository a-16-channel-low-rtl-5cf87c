# Phase-locked deep-brain-stimulation core: 16-channel connectivity extraction and closed-loop stimulus control

Closed-loop deep brain stimulation should deliver a pulse at a chosen moment of a brain rhythm. Examples are a given phase of the theta oscillation, or a time when two regions are strongly coupled. It should not fire on a fixed timer.

This RTL is the digital core of such an implant chip:

- It digitises 16 recording channels.
- It filters every channel into a band of interest.
- It turns each band signal into an analytic (complex) signal, and from that takes instantaneous phase and amplitude.
- It measures coupling between channel pairs over windows of 0.25–2 s:
  - phase-locking value (PLV);
  - phase–amplitude coupling (PAC);
  - spectral energy (SE).
- It decides from those features when to fire a biphasic, charge-balanced current pulse on up to four stimulation channels.

Everything runs from one 256 kHz clock. The analog parts are outside the RTL and reach it through ports:

- low-noise amplifiers, analog multiplexer, integrator and 10-bit SAR ADC;
- charge pump and high-voltage H-bridge drivers;
- the charge-balance comparators.

```
 ADC word ─► afe_sequencer ─► threefold_fir ─► connectivity_extractor ─► stim_controller ─► stim_pulse_gen ─► switch controls
   (10 b)    (mux address,    (LPF↓4, BPF1,    (LPE phase, l∞ amp,        (F_SMP / F_WIN,     (POS, NEG, CB_A,
              sample/clear,    BPF2, Hilbert)    PLV/PAC/SE windows)        3 modes, PRBS)      CB_P, EN_CP)
              blanking) ◄──────────────────────────────────────────────────────────────────── stim_active
                               ▲ fir_coeff_mem (4 programmable coefficient sets)
```

The top is `pldbs_soc`, and `nc_pkg` holds the shared constants, types and configuration record.

## Time plan: 256 cycles per millisecond

The core clock is 256 kHz.

**ADC slots.** 16 channels at 4 kS/s give one ADC word every 4 cycles (`afe_sequencer`, `SLOT_CYC = 4`).

- A slot opens with the multiplexer address and an integrator clear (`afe_phi_clr`).
- The slot ends with the sample strobe (`afe_phi_smp`).
- The word that comes back is tagged with its slot number. All DSP works on slot numbers 0–15.
- `ch_order` maps each slot to a physical electrode, so the electrodes can be scanned in any order.

**Decimation.** The filter decimates by 4. Only every fourth word of a channel starts filter work. That happens once per channel per millisecond, so a 16-channel frame lasts 256 cycles at 1 kS/s.

**Blanking.** While a stimulus is active, and for `blank_hold` cycles after it, `afe_en_blk` is high so the analog front end can be blanked.

## The threefold FIR (`threefold_fir`, `fir_coeff_mem`)

Three filters run in sequence for each channel. They share one datapath: 21 pre-adders, 21 multipliers and an adder tree.

| line | taps | symmetry | rate | lanes used |
|---|---|---|---|---|
| LPF (anti-alias, then ↓4) | 25 | even | 4 kS/s in | 13 |
| BPF | 42 | even | 1 kS/s | 21 |
| Hilbert (HT) | 15 | odd | 1 kS/s | 7 |

**Pre-adders.** Because each filter is symmetric or antisymmetric, lane *k* first forms `x[n-k] ± x[n-(N-1-k)]`, and only then multiplies.

- For the Hilbert filter the pre-adder subtracts.
- The Hilbert filter's centre coefficient is zero. Its real output (`D_HT,Re`) is simply the centre tap `z^-7`, which gives the same group delay as the imaginary output.

**Four slots per decimated sample.** When a channel's fourth ADC word arrives, the datapath spends four consecutive cycles on it:

| slot | coefficient set | result |
|---|---|---|
| LPF | 0 | `D_LPF` (also written into the channel's BPF delay line) |
| BPF1 | 1 | `D_BPF1` |
| BPF2 | 2 | `D_BPF2` |
| HT | 3 | `D_HT,Re`, `D_HT,Im` |

The two band-pass slots run two coefficient sets over the same 42-sample history. Per channel, `band_sel` chooses which band result goes into the Hilbert line. For example, channel 0 can follow theta while channel 1 follows high gamma, and a PAC pair can couple them.

**Delay lines.** Each channel has three delay lines: 25, 42 and 15 words of 12 bits. A line is written only when its filter consumes a new sample. This is the enable form of the per-line clock gating a chip would use.

**Latency.** Results appear together on `fir_valid`, 6 cycles after the ADC word that started them.

**Number formats.**

- The 10-bit offset-binary ADC code becomes `(code−512)·4` in a signed 12-bit word.
- Coefficients are signed Q1.11 (`CW = 12`, `CFRAC = 11`).
- Each result is rounded half-up, shifted right by 11 and saturated to 12 bits.
- `fir_coeff_mem` holds 4 × 21 coefficients, written through `coef_we/coef_addr/coef_wdata` with `addr = {set, index}`.
  - Writes past a set's length (13, 21, 21, 7) are ignored.
  - Lanes past the length read as zero.

**Group delay.** LPF 12 samples at 4 kS/s (3 ms) + BPF 20.5 ms + Hilbert 7 ms ≈ 30.5 ms. Phase targets must allow for this.

## Lightweight phase extractor (`lpe`)

`lpe` produces a 10-bit phase (π = 512) of (Re, Im) without a CORDIC or a full arctangent table:

1. **Octant.** The signs of Re and Im and the comparison |Re| ≥ |Im| choose the octant. The smaller magnitude becomes the numerator `n` and the larger the denominator `d`.
2. **Normalisation.** Both are shifted left by the leading-zero count of `d`, and the top 9 bits of each are kept. `d` is then in [256, 511].
3. **Division by reciprocal.** `n/d ≈ n · recip[d−256] >> 9`, with `recip[i] = floor((2^17−1)/(256+i))` (256 × 9 bits). This gives an 8-bit index `q`, saturated to 255.
4. **Linearisation.** `lin[q] = min(127, round(atan((q+0.5)/256)·512/π))` (256 × 7 bits) turns the ratio into an angle in [0, π/4).
5. **Reconstruction.** The octant puts the angle back as an offset of 0, ±π/2 or ±π, plus or minus the angle.

Both tables are filled from these formulas when simulation starts. A synthesis flow would turn them into ROMs.

- **Timing:** one register stage.
- **Measured accuracy:** at most 1 LSB (0.35°) against a floating-point `atan2`, over 21,000 random and edge-case vectors.

One LPE is shared by all 16 channels, because at most one analytic pair arrives per cycle.

## Connectivity extractor (`connectivity_extractor`)

**Per-sample features (F_SMP).** For every analytic pair, the extractor stores:

- the phase;
- an l∞ amplitude envelope, `max(|Re|, |Im|)`, which is a cheap stand-in for the true magnitude.

`smp_valid/smp_ch` pulse 2 cycles after the pair enters, which is when `f_phase[ch]` and `f_amp[ch]` have been refreshed.

**Windowed features (F_WIN).** A window is `256 << win_log2` frames (256–2048 ms).

- **Snapshot and pair sequencer.** When channel 15 closes a frame, the 16 phases and amplitudes are snapshotted. An 8-cycle sequencer then walks the 8 pairs, using one sine/cosine table (`sincos_lut`, a quarter wave of 256 × 9 bits, output ±511).
  - PLV pair `(a, b)`: accumulate `sin(θa − θb)` and `cos(θa − θb)`.
  - PAC pair: accumulate `A_b·sin θa` and `A_b·cos θa`. This is the phase of one channel weighted by the envelope of the other.
- **Magnitude.** At the end of the window the result is the l∞ magnitude of the two sums, divided by the window length with a shift.
  - For PLV, 511 means perfect locking.
  - For PAC the result is in amplitude units.
- **SE.** Per channel, the SE is the mean of `Re²` (the band-passed signal) over the window.
- **Output.** `win_valid` pulses once per window; `f_pair[8]` and `f_se[16]` hold the values until the next window.

## Stimulation decision (`stim_controller`, `prbs_gen`)

**Threshold crossing (F_SMP path).** `sel_fsmp` picks one phase (0–15) or one amplitude (16–31) from the F_SMP bank.

- It is compared, at each refresh of that channel, against `th_smp`, or against a 10-bit PRBS value when `sel_th = 1`.
- The PRBS is `x^10 + x^7 + 1` and advances once per accepted trigger, which randomises the stimulation phase.
- An event is a *rising* crossing: the comparator is ANDed with the inverse of its previous value.
- A crossing that comes from the phase wrapping from −π to +π is discarded. That is an upward jump of more than half a turn between two samples.

**Window test (F_WIN path).** `sel_fwin` picks one of the 8 PLV/PAC results (0–7) or one SE (8–23).

- At every `win_valid` it tests `th_win_l < F_WIN < th_win_h`.
- The result `win_ok` is held until the next window.

**Modes (`sel_mode`).**

| mode | trigger when |
|---|---|
| OFF | never |
| SMP | F_SMP crossing |
| WIN | at every per-sample evaluation while `win_ok` is high |
| SMP_WIN | F_SMP crossing while `win_ok` is high |

**Rate cap.** A trigger is accepted only if at least `min_interval` evaluations have passed since the last one. At 1 kS/s, `min_interval = 166` caps stimulation at 6 Hz.

**Output.** An accepted trigger pulses `en_stim` for one cycle on the channels enabled in `stim_ch_en`.

## Pulse generator (`stim_pulse_gen`)

Each of the four stimulation channels runs this sequence:

| phase | length |
|---|---|
| `POS` | `pw` cycles |
| `NEG` | `pw` cycles |
| `CB_A` (active charge balance) | 64 cycles |
| `CB_P` (passive discharge) | 256 cycles |

- **Active charge balance.** During `CB_A` the residual-voltage comparators gate the correction current:
  - `cb_pos = CB_A & cb_cmp_lo` when the residual is below −V_safe;
  - `cb_neg = CB_A & cb_cmp_hi` when it is above +V_safe.
- **Repetition.** While `en_stim` is held, a new pulse starts at most every `freq` ms (`freq·256` cycles). A one-cycle trigger from the controller gives one pulse.
- **Charge-pump enable.** `en_cp` is high while any channel drives current (POS, NEG or CB_A).
- **Blanking.** `stim_active` (any channel not idle) drives the AFE blanking.

## Configuration

All settings enter as one packed record, `nc_pkg::soc_cfg_t`:

- channel order and blanking hold;
- band select per channel;
- the 8 pair definitions and the PLV/PAC flag;
- window length;
- feature and threshold selects;
- thresholds and rate cap;
- stimulation channel mask, pulse width and repetition period.

Coefficients load through the separate write port. The FIR outputs and all features are brought out as ports for read-out.

## Where this RTL departs from, or goes beyond, the source design

Several points were unspecified there and are this design's own choices:

- all word widths (12-bit data and coefficients, 24-bit window accumulators);
- table contents and the exact linearisation scheme;
- SE as the mean square of the band signal;
- the l∞ magnitudes;
- power-of-two window lengths;
- select encodings;
- pulse-width and period units;
- charge-balance window lengths;
- the polarity of the active-CB switches;
- when a window-locked trigger fires;
- the host configuration interface (a packed record instead of a serial interface).

Other departures:

- **BPF1/BPF2.** These are read as two programmable bands over one band-pass history, with a per-channel choice feeding the Hilbert filter.
- **Decimated LPF outputs** that would be thrown away are not computed.
- **Clock gating** is written as write enables.
- **Short Hilbert filter.** The 15-tap Hilbert filter at 1 kS/s has little gain below about 30 Hz. Theta-band (6 Hz) phase still comes out with the right sign and ordering, but from a small imaginary part. A 42-tap band-pass at 1 kS/s also has a transition width of roughly 24 Hz, so it cannot isolate a 4–8 Hz band sharply. For that reason the end-to-end test uses 40 Hz and 120 Hz tones.
- **Analog parts** are not modelled in `rtl/`. The end-to-end testbench contains a simple ADC stand-in.

## Verification

Each block has a self-checking testbench in `tb/` that prints `TB_RESULT checks=N failures=M`:

- `tb_lpe`: compared against `atan2`.
- `tb_sincos_lut`: all 1024 phases.
- `tb_threefold_fir`: bit-exact against a direct-form model, including the 6-cycle latency.
- `tb_connectivity_extractor`: PLV, PAC and SE against floating-point sums over three windows.
- `tb_stim_controller`: every mode, wrap rejection, rate cap and PRBS thresholds, with counters for each.
- `tb_stim_pulse_gen`: phase lengths, CB gating and repetition period.
- `tb_afe_sequencer`, `tb_fir_coeff_mem` and `tb_prbs_gen`.

`tb_pldbs_soc` runs the whole core at its default parameters:

- It loads windowed-sinc coefficients.
- It feeds 16 channels of 40 Hz and 120 Hz test tones through the ADC stand-in.
- It checks the FIR outputs bit-exactly.
- It runs each stimulation mode for 300 ms, and counts triggers, rate-capped triggers, window-blocked triggers, pulses, blanking and active-CB cycles. A mechanism that never happens counts as a failure.

To simulate with plain Verilator (5.x), run this from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
          --top-module tb_pldbs_soc rtl/nc_pkg.sv tb/tb_pldbs_soc.sv
./obj_dir/Vtb_pldbs_soc
```

Replace `tb_pldbs_soc` with any other testbench name to run that block's test. The whole-core test finishes in about a second of host time.
