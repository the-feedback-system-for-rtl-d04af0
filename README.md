# Longitudinal mode-by-mode feedback processor

A bunched proton beam in a synchrotron can start to oscillate coherently: every
bunch swings in phase (or energy) at the synchrotron frequency f_s, and the
phase advance from bunch to bunch defines a *coupled-bunch mode*. With M
buckets there are M modes, n = 0 … M-1. Seen from a beam pickup, mode n shows
up as a pair of narrow lines next to the revolution harmonics:

    upper sideband (USB)  n·f_rev + m·f_s
    lower sideband (LSB)  (M-n)·f_rev - m·f_s

where m = 1 is a dipole (rigid) oscillation and m = 2 a quadrupole one. In the
J-PARC Main Ring (harmonic number 9, f_rev 185–191 kHz, f_s falling from
350 Hz to 30 Hz during acceleration) the troublesome mode n = 8 appears as the
USB of h = 8 and the LSB of h = 10.

This RTL implements the FPGA logic of a feedback processor that damps such
oscillations one mode at a time. Its central idea is **single-sideband
filtering**: each harmonic is brought to baseband, then each synchrotron
sideband is shifted to DC on its own and isolated with a low-pass filter whose
notches follow f_s through the cycle. The isolated sideband is a slowly
varying complex number. A PI controller drives it to a reference, and the
correction is shifted back to exactly the same sideband frequency and sent to
the kicker cavity. Because the USB and the LSB of a harmonic are handled
separately, each coupled-bunch mode gets its own loop.

The design follows the published description of the J-PARC MR feedback
system (Y. Sugiyama, M. Yoshii, F. Tamura). That description gives the block
structure, the mixer and adder arrangement and the filter type. Word widths,
filter details, table sizes and interfaces are this design's choices. They are
listed at the end.

## Signal flow

```
            ftw_rev ─┐        ┌─ phase_rev, freq_rev ──────────────────────┐
            ftw_syn ─┴─ DDS ──┴─ phase_syn, freq_syn ─────────────┐         │
                                                                 │         │
adc_i ─┬─► [ sfb_block 0 ] ──┐                                    │         │
       ├─► [ sfb_block 1 ] ──┤                                   (all six blocks)
       │        …            ├─► fb_sum ─► dac_o
       └─► [ sfb_block 5 ] ──┘

sfb_block (one harmonic h, one sideband):
  baseband_demod ─► ssb_demod ─► pi_control (I, Q) ─► ssb_mod ─► baseband_mod ─► rf
   x·e^{jhφr},       ±m·f_s → DC      ▲ reference_pattern   DC → ±m·f_s   baseband → RF
   one-turn avg      tracking CIC     │
                     phase offset LUT
```

Everything runs on one 144 MHz clock. The DDS turns the two frequency patterns
(tuning words, f = ftw · 144 MHz / 2^32) into the revolution phase φr and the
synchrotron phase φs. These phases drive every oscillator in the six blocks.
The beam signal and all oscillators therefore share one phase reference. In
the machine, the revolution-frequency pattern has to be the one that the beam
actually follows.

## Number formats

* Samples, I/Q components, mixer outputs and controller outputs are 16-bit
  two's complement, Q1.15. Sums are saturated, never wrapped.
* Phases are 32-bit fractions of a turn. LUT offsets are the top 16 bits of
  such a phase.
* PI gains are signed 16-bit with 8 fractional bits (256 = 1.0). The integral
  gain applies per controller update, that is, per x32 tick.
* All oscillators come from pipelined CORDICs (`cordic`, 16 iterations,
  amplitude 32767, latency 18 clocks).

## The baseband convention (read this before changing any sign)

`baseband_demod` forms I = x·cos(hφr) and Q = x·sin(hφr) and averages them
over exactly one revolution. A beam component A·cos(hφr + ψ) then becomes
I + jQ = A·e^{-jψ}. It follows that the **upper sideband appears at -m·f_s and
the lower sideband at +m·f_s** in the baseband. The signs of the
single-sideband stages rely on this:

| stage | USB | LSB |
|---|---|---|
| `ssb_demod` | (I+jQ)·e^{+jθ}: I cos − Q sin, I sin + Q cos | (I+jQ)·e^{−jθ}: I cos + Q sin, Q cos − I sin |
| `ssb_mod`   | (I+jQ)·e^{−jmφs}: I cos + Q sin, Q cos − I sin | (I+jQ)·e^{+jmφs}: I cos − Q sin, I sin + Q cos |

θ = m·φs + offset, where the offset comes from the LUT. `baseband_mod`
closes the circle with rf = I·cos(hφr) + Q·sin(hφr). A feedback vector F then
leaves the processor as |F|·cos(hφr ± mφs − arg F), at the sideband it was
detected on. If the kick arrives back at the pickup unchanged, the detected
vector is F·e^{j·offset} for the USB and F·e^{−j·offset} for the LSB.

One CORDIC serves both sideband pairs of the demodulator. The offset therefore
always comes from the table of the *selected* sideband. It turns the USB
forwards and the LSB backwards.

## Isolating one sideband: the tracking CIC

After the shift, the wanted sideband sits at DC. The carrier of the harmonic
now sits at m·f_s and the other sideband at 2m·f_s. Both move during the cycle
as f_s changes. `tracking_cic` removes them without knowing where they are.

* `x32_clock` emits a clock enable whenever the synchrotron phase crosses one
  of 32 equally spaced points of a turn, giving 32 ticks per synchrotron
  period at any f_s. The tick is taken from φs *before* the multiplication by
  m.
* The CIC runs entirely on these ticks: two integrators, two combs with a
  delay of 32 ticks, and a division by 1024. Each stage is therefore a moving
  average over exactly one synchrotron period. The response is
  (sin(πf/f_s) / (32·sin(πf/32f_s)))², with notches at every multiple of f_s,
  which includes m·f_s and 2m·f_s for any m.
* The filter is sampled, not averaged, between ticks. That works because the
  baseband has already been averaged over each turn (f_rev / 32f_s ≥ 17).
* Group delay is one synchrotron period, and the step response settles after
  63 ticks (two periods). This delay dominates the loop. With P control alone,
  the loop stays stable up to a loop gain of about 2.6.

The one-turn average in `baseband_demod` is the other filter in the chain.
It has a notch at every revolution harmonic, so the other harmonics of the
beam and the 2h image of the mixer vanish. It needs no divider: a turn holds
2^32/ftw_rev samples, so the mean is sum·ftw_rev/2^32. Together with its hold,
it delays the sideband by about one turn. That is a rotation of
±2π·m·f_s/f_rev, which is 0.7° at 350 Hz. The phase offset LUT absorbs this
rotation together with every other phase of the loop.

## Closing the loop

`pi_control` (one each for I and Q) updates on every CIC output:

    e = reference − detected
    u = (kp·e + acc) / 256,     acc ← clamp(acc + ki·e)

The integrator is clamped to the range that can still move the output.
With `fb_enable = 0` the loop is open: the integrator is cleared and the
reference passes straight to the output. A non-zero reference pattern then
*excites* the chosen mode. This is how the system drives a controlled
oscillation for measurements.

`reference_pattern` holds 1024 I/Q set points. `sync_i` restarts it, and it
steps every `ref_step_i` clocks, holding the last entry at the end.

**Calibrating the phase offset LUT.** The phase of everything between the
DAC and the detector must be compensated, or the loop will not damp. That
includes cables, amplifier, cavity, beam response, the processor's filters
and the pipelines. This phase changes with f_s, so the offset table is
addressed by m·f_s: the tuning word × m, shifted right by 7 bits and clamped.
The 256 bins are 4.3 Hz wide and cover m·f_s up to 1.1 kHz, with a separate
table per sideband. The procedure, which the top-level testbench also
performs, is:

1. Open the loop and excite with a reference R. Record the detected vector D
   over the cycle.
2. The loop phase is α = arg(D/R). For each bin, write −α for the USB and +α
   for the LSB.
3. Check that detected and reference phases now agree, then close the loop.

## Back to RF and the sum

`ssb_mod` uses its own CORDIC at m·φs, with no offset. `baseband_mod` uses one
at h·φr. `fb_sum` adds the RF samples of the blocks whose `out_enable` is set,
saturates the total to 16 bits for the DAC and flags saturation.

## Timing summary (144 MHz clocks)

| path | latency |
|---|---|
| CORDIC | 18 |
| phase → baseband I/Q | once per turn (≈766 clocks), result 22 clocks after the turn wrap |
| x32 crossing → CIC output | 25 |
| CIC group delay | one synchrotron period (≈411 k clocks at 350 Hz) |
| PI | 1 (per tick) |
| feedback vector → RF sample | 21 (`ssb_mod` 21 from the phase, `baseband_mod` 21 from the phase) |
| RF sum → DAC word | 1 |

## Top-level interface (`lmbf_top`)

| port | meaning |
|---|---|
| `clk`, `rst` | 144 MHz clock, synchronous active-high reset |
| `sync_i` | start of a machine cycle: clears the DDS phases and restarts the reference patterns |
| `adc_i[15:0]` | beam signal from the ADC |
| `ftw_rev_i`, `ftw_syn_i` | revolution and synchrotron frequency patterns as tuning words |
| `cfg_i[6]` | per block: `harmonic`, `m`, `sideband`, `fb_enable`, `out_enable`, `kp`, `ki` (`lmbf_pkg::chan_cfg_t`) |
| `lut_we_i`, `lut_chan_i`, `lut_wsb_i`, `lut_waddr_i`, `lut_wdata_i` | write one phase offset entry of one block |
| `ref_step_i`, `ref_we_i`, `ref_chan_i`, `ref_waddr_i`, `ref_wdata_i` | reference pattern step and table writes |
| `dac_o[15:0]`, `dac_sat_o` | DAC word and its saturation flag |
| `det_o[6]`, `det_valid_o`, `fb_out_o[6]` | detected sideband and feedback output of each block, for monitoring |

Neither table is reset. Load every LUT bin and reference entry before use.

## Simulating

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`.
Run one with plain Verilator from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
    rtl/lmbf_pkg.sv tb/tb_lmbf_top.sv --top-module tb_lmbf_top
./obj_dir/Vtb_lmbf_top
```

| testbench | what it shows |
|---|---|
| `tb_cordic` | cos/sin within 4 LSB over random and corner phases, latency 18 |
| `tb_dds` | both accumulators and sync against a model |
| `tb_baseband_demod` | A·e^{−jψ} for h = 8 and 10, with a neighbouring harmonic rejected; one result per turn at 512 and at 766.4 samples per turn |
| `tb_x32_clock` | a tick one clock after each 1/32-turn crossing, 32 per turn |
| `tb_tracking_cic` | bit-exact against a moving-sum model, DC gain 1, notches at f_s and 2f_s |
| `tb_phase_offset_lut` | m·f_s addressing, clamping, separate tables, 2-clock read |
| `tb_ssb_demod` | both sidebands separated from carrier and each other, LUT offset, 32 results per period |
| `tb_reference_pattern` | stepping, hold at the end, restart |
| `tb_pi_control` | PI law against an integer model, open-loop pass-through, saturation |
| `tb_ssb_mod`, `tb_baseband_mod` | sample-exact modulation against real-valued models |
| `tb_fb_sum` | enables, saturation and flag |
| `tb_sfb_block` | one harmonic against a beam model with its own kick fed back: USB and LSB detection, excitation from a stepping pattern (RF checked sample by sample), LUT calibration, P control halving the oscillation, PI control suppressing it |
| `tb_lmbf_top` | the whole processor at its default size: mode 8 detected on h = 8 USB and h = 10 LSB at once, excitation, calibration of both LUTs, P and PI damping on both blocks, DAC saturation, output disable, and detection at f_s = 350 Hz. It counts each mechanism and fails if one never happens. It runs in about a minute |
| `tb_workload_cycle` | the beam-test sequence on a compressed acceleration cycle, with f_s falling from 5.6 kHz to 700 Hz and f_rev rising from 185 to 191 kHz (two blocks, LUT bins widened to 34 Hz). Open-loop excitation, with the phase difference collected per LUT bin (it turns by about 21° over the cycle). Then the table is written and the phase difference stays within ±5° (1.3° worst). Finally P control of loop gain 1 holds an oscillation at one half of its open-loop size throughout |

To keep runs short, the system-level tests raise f_s to 4.4 kHz, except for
the final 350 Hz step of `tb_lmbf_top`. f_s is an input, so no parameter
changes for this. `tb_workload_cycle` sweeps both frequencies, but over 3·10^6
clocks and with f_s raised. A real 1.4 s acceleration cycle would take
2·10^8 clocks and has not been simulated.

## What is this design's own, and what to trust

Taken from the published design: the 144 MHz single clock, the 16-bit ADC and
DAC words, six harmonic blocks summed into one DAC, and the DDS supplying
revolution and synchrotron frequency and phase. The chain baseband demod →
SSB demod → PI with reference → SSB mod → baseband mod also comes from there.
So do the four mixers and the +/− signs of the eight adders in both
single-sideband stages, and the USB/LSB selectors. The remaining published
elements are the CORDIC-generated oscillators, a two-stage CIC on a clock of
32 × f_s that tracks the synchrotron frequency, and the phase offset LUT. That
LUT sits on the demodulator side only, is addressed by m·f_s and has separate
USB/LSB settings.

Chosen here, because the description does not give them:

* the baseband low-pass filter (one-turn average, normalized by the tuning word);
* the CIC details (sampling on the tick, output at every tick) and the x32
  clock as a clock enable derived from phase bits;
* all word widths, the Q1.15 format, rounding and saturation;
* LUT depth, bin width and clamping;
* reference pattern depth and uniform time step;
* PI gain format, integrator clamp, and the open-loop pass-through used for
  excitation. The source says only that excitation used a non-zero reference
  pattern and that the loop was closed later;
* one `sideband` setting per block drives both USB/LSB selectors, the one
  after the CICs and the one after the modulator. The block diagram draws
  two selector symbols, but the description speaks only of "the selected
  sideband";
* the per-block output enable, the saturation flag and the monitoring outputs;
* the register-write style configuration ports. The control-system side (an
  EPICS IOC on the Zynq processor) is not part of this RTL.

Not included: the analog front end and the chips around the FPGA (wall
current monitor, ADC, DAC, PLL, RF amplifier, cavity, LLRF summing), and the
control software. The frequency patterns arrive as tuning words every clock,
and how they are produced from the machine timing is outside this design.

Verification status: every block is compared with an independent model. The
closed-loop behaviour has been checked only against an idealized beam: a
fixed-gain return of the kick through a fixed cable delay, without
synchrotron dynamics. In the swept-frequency test, the phase response that
the per-bin table corrects is smooth: cable delay plus the one-turn average.
The ripple in phase against f_s seen on the real processor is not
reproduced by this model. The
loop stability margins quoted above follow from the filter delay alone. No
synthesis timing closure at 144 MHz has been attempted. The 32-bit phase
multipliers feeding the CORDICs and the 80-bit normalization product in
`baseband_demod` are the likely places to add pipeline registers.
