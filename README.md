# LLRF logic for the Recycler 2.5 MHz and Delivery Ring 2.36 MHz RF

The Recycler ring runs its 52.8 MHz RF system as before. For the muon
experiments, a 52.8 MHz batch is rebunched into 2.5 MHz bunches and then sent
either to the g-2 target or to the Delivery Ring. The Delivery Ring has a
single 2.36 MHz cavity. This repository holds the FPGA logic that generates
those RF signals. It has three jobs:

1. **Make a 2.5 MHz RF that is phase locked to the 52.8 MHz RF.** A digital
   PLL running from the 50 MHz machine reference produces three phases that
   stay aligned with each other: the revolution frequency (h=1, 89.8 kHz),
   2.5 MHz (h=28) and 52.8 MHz (h=588).
2. **Put the 2.5 MHz RF on bucket zero every machine cycle.** Bucket zero,
   where the first batch sits, can be any of the 588 RF buckets. 2.5 MHz is
   52.8 MHz divided by 21, so the 2.5 MHz phase relative to bucket zero can
   take any of 21 values. The logic measures the bucket-zero (RRAA) marker
   against the internal h=1 phase, multiplies the result by 28, and adds it to
   the 2.5 MHz phase as an offset.
3. **Time the transfers to the Delivery Ring.** 2.36 MHz is not a harmonic
   of the Recycler RF, so nothing can stay locked between the two rings.
   Instead, the Delivery Ring NCO is restarted at a known phase in step with
   the bucket-zero marker, a fixed number of turns before the kicker fires.

Everything runs in one 50 MHz clock domain, one sample per clock.

## Block map

```
adc_rf53 ─► digital_pll ──────────────── ph588 (closes the loop)
            │  cordic_p2r(NCO) ► downconverter ► cic_filter ► iir_lpf ► cordic_r2p
            │  ► loop_filter ► gain_adjust ► harmonic_nco (h=1, h=28, h=588)
            ├─ ph1 ─► marker_phase_detector ◄─ adc_marker
            │           cordic_p2r ► downconverter ► iir_lpf ► cic_filter(÷557) ► cordic_r2p
            │                      └► phase_correction (×28, latch) ─► offset28 ─┐
            ├─ ph28 (+offset28) ─► rf_drive ─► dac_h28                             │
            │          ▲─────────────────────────────────────────────────────────┘
            ├─ ph1, ph28 ─► marker_gen ─► rev_marker, bucket_marker
rraa_ttl, extr_event_ttl ─► edge_sync ─► transfer_sequencer ─► extr_sync, rf_enable,
                                           acdipole_enable, dr_nco_reset, kicker_fire
cycle_rst_ttl ─► edge_sync ─► dr_nco ×3 (2.36 MHz, 4.41 MHz, 294 kHz) ─► rf_drive ─► dac_dr
```

`llrf_top` wires these together. The ADCs, DACs, the 5 V TTL level-shifting
board, the control processor and the crate interface sit outside it. Their
samples, DAC words and control registers are plain ports.

## The digital PLL (`digital_pll`)

The 52.8 MHz RF is sampled at 50 MHz, so it appears at 2.8 MHz. The
internal h=588 phase accumulator wraps the same way, so no special handling
is needed. The loop works as follows:

* **Phase detector.** A CORDIC (`cordic_p2r`) turns the h=588 phase into
  cos/sin. The `downconverter` mixes the ADC sample with them. The mixer
  output contains the wanted baseband term plus a sum-frequency term at
  2 × 2.8 = 5.6 MHz. A `cic_filter` removes that term: it is a non-decimating
  moving sum of length 9, with its first zero at 50/9 = 5.56 MHz. A
  first-order `iir_lpf` follows it. A second CORDIC (`cordic_r2p`) then
  converts the filtered I/Q to a phase. Its inputs are 20 bits and its output
  is 22 bits, with ±π mapped to ±2^21. The phase detector gain is therefore
  K1 = 2^21/π per radian.
* **Loop filter.** `loop_filter` is a lag-lead filter
  F(s) = (1 + s/ω2)/(1 + s/ω1), with ω1 = 2π·500 rad/s and ω2 = 2π·738 rad/s.
  These values give a damping factor of 2 at a loop gain of 10^5. The filter
  is discretised by the matched-z method, with unity gain at DC. Its
  coefficients are Q2.30 integers. The filter state carries 24 extra fraction
  bits, because the pole's per-sample step (1 − e^{-ω1Ts} ≈ 6·10^-5) is tiny.
* **Gain adjust.** `gain_adjust` is an arithmetic right shift. Each bit
  shifted lowers the loop gain by 6 dB.
* **Accumulators.** `harmonic_nco` holds three 30-bit accumulators. The h=1
  increment is `nom_inc + fm`, where `fm` is added at the LSB. The h=28
  increment is 28 times that, and the h=588 increment is 21 times the h=28
  increment, all modulo 2^30. The three accumulators are reset together and
  always step by exactly proportional amounts. As a result,
  `ph28 = 28·ph1 + offset28` and `ph588 = 588·ph1` hold on every clock, not
  just on average.

The ×28·×21 chain puts a factor of 588 into the loop. The full loop gain is
therefore K = (2^21/π)·588·(2π·50 MHz/2^30) ≈ 1.15·10^8 (161 dB) at shift 0.
A shift of 10 brings it to about 10^5, which is the intended operating point.
This is a type-1 loop: a frequency offset Δω leaves a static phase error of
Δω/K. The testbench checks exactly this: a 2 kHz offset gives
fm ≈ 73 and an error of 0.126 rad.

The ADC sample is delayed by the NCO CORDIC latency (20 clocks) before the
mixer. The mixer therefore always combines a sample with the NCO value from
the same clock. The loop delay is about 50 clocks (1 µs).

## Bucket-zero alignment (`marker_phase_detector`, `phase_correction`)

The RRAA marker is a pulse about 130 ns wide, once per turn (11.1 µs). Its
samples are mixed with cos/sin of the internal h=1 phase. Only the pulse
train's fundamental lands at DC. Its phase there is −θ1(t_marker): the h=1
phase at the marker centre, with the sign reversed.

The I/Q pass through a light `iir_lpf` and then a 2-stage `cic_filter` that
decimates by 557. 557 samples is one turn (556.8 samples). This puts the
filter's zeros on the revolution harmonics, so the pulse's other harmonics
are removed. `cordic_r2p` then produces one phase per turn.

Multiplying that phase by 28 gives the h=28 offset that makes the 2.5 MHz
phase zero at the marker centre. It also resolves which of the 21 possible
positions the 2.5 MHz RF is in. `phase_correction` performs the ×28 (with a
2^8 rescale from 22-bit to 30-bit phase units). It latches the first
measurement that arrives after `align_req` and holds it until the next
request. Because of the rescale and the factor of 4 in 28, the low 10 bits of
the offset are always zero.

The alignment only works if the marker sample and the h=1 phase are exactly
aligned. One clock of skew is 0.65° at h=1, which becomes 18° at 2.5 MHz. The
marker path therefore uses the same CORDIC-latency delay line as the PLL. The
end-to-end testbench interpolates the h=28 phase to the true marker centre
and checks that it is within 2° of zero on every turn after alignment.

## Transfer to the Delivery Ring (`transfer_sequencer`, `dr_nco`)

Everything is counted in turns, using the synchronised RRAA marker. An
extraction event arms the sequencer. The sequence then runs as follows:

| turn | action |
|------|--------|
| 0 (first marker after the event) | `extr_sync` pulse |
| 1 (`DISABLE_TURN`) | `rf_enable`, `acdipole_enable` low |
| 89 (`RESET_TURN`) | `dr_nco_reset` pulse; DR NCOs restart at their offsets |
| 90 (`ENABLE_TURN`) | `rf_enable`, `acdipole_enable` high again |
| 180 (`KICK_TURN`) | `kicker_fire` pulse; sequence ends |

The kicker needs about 2 ms (180 turns) to charge, and the AC dipole needs
more than 600 µs to settle. That is why extraction is signalled this far
ahead. The drive comes back one turn after the NCO reset, and the cavity
rises within a turn.

On each reset, `dr_nco` loads `base_offset + k·adv_step`, where k counts the
resets since the last machine-cycle reset. For consecutive 2.5 MHz bunches,
which are 397.7 ns apart, the step is 337.9° (`DR_ADV_337_9`). This keeps
each bunch landing at the same Delivery Ring phase. `base_offset` is used to
tune the injection phase.

Three NCOs are restarted together: 2.36 MHz, 4.41 MHz and 294 kHz. Only the
2.36 MHz one drives a DAC (`dac_dr`), gated by `rf_enable`. The other two are
brought out as phases.

## Interfaces and timing

* Phases are unsigned 30-bit, with a full turn equal to 2^30. Detector phases
  are signed 22-bit, with ±π equal to ±2^21. ADC samples and DAC words are
  signed 14-bit.
* `nom_inc = 1928353` is 52.8 MHz/588 at 50 MHz. DR increments are in
  `llrf_pkg`.
* Latencies:

  | block | latency |
  |-------|---------|
  | `cordic_p2r` | ITER+2 = 20 clocks |
  | `cordic_r2p` | 22 clocks |
  | `rf_drive` | 21 clocks from phase to DAC word |
  | `edge_sync` | 3 clocks |
  | `marker_phase_detector` | one result every 557 clocks |

* The RF drive latency is not compensated. Cable and cavity delays are also
  not compensated. Either can be trimmed with the phase offsets.
* All resets are synchronous and active high.

## Design choices and departures from the published design

* **Loop filter equation.** The published z-domain loop-filter equation has
  `+` signs. That would place the pole near z = −1, which does not match the
  low-pass F(s) given alongside it. This RTL implements F(s) by the matched-z
  method, with unity DC gain.
* **"Order 9" CIC.** This is read as a single length-9 moving sum, which
  matches the stated 5.56 MHz zero.
* **IIR coefficients.** None are published. The RTL uses the power-of-two
  form y += ((x+x₋₁)/2 − y)·2^-K, with K = 8 in the PLL (pole near 31 kHz).
  The CIC/IIR combination then gives about 85 dB at 5.6 MHz, short of the
  quoted 100 dB. A lower pole would reach 100 dB but would cost phase margin.
* **Filter placement in the PLL.** The filters sit on I/Q ahead of the CORDIC,
  the same as in the marker path. The published design only says that the
  downconverter output is low-pass filtered.
* **Marker-path filters.** The decimation ratio (557), the number of CIC
  stages (2) and the IIR K (2) are this design's choices.
* **Disable turn.** `DISABLE_TURN = 1` is a choice; the published design only
  places the disable before the NCO reset.
* **Kicker output.** The kicker-fire output at turn 180 is this design's.
* **Alignment request.** The latch-on-request protocol is this design's.
* **Not included:** the cavity-voltage, radial-position and beam-phase
  measurements (named but not specified), the control processor software and
  register map, the crate interface, and the analog front end.
* **Widths.** CORDIC iteration counts, the 18-bit NCO output width and the
  mixer scaling are this design's choices.

## Simulating

Each block has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each
prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/llrf_pkg.sv tb/tb_llrf_top.sv --top-module tb_llrf_top -o sim
./obj_dir/sim
```

`tb_llrf_top` runs the whole design at its default parameters for 420 000
clocks (8.4 ms), which takes a few seconds. The stimulus includes:

* a 52.8 MHz reference with a random bucket-zero position;
* a smooth sampled marker and a TTL marker;
* a machine-cycle reset and an alignment request;
* two extraction events.

It checks PLL lock, alignment at every marker, the turn at which each
sequencer action happens, the DR reset phase, the per-bunch advance, and the
drive gating. It also counts each of these events and fails if any of them
never happens.

The testbenches use a two-state simulator with random initial values, so
everything that is read is reset.

## How far to trust it

Every block is checked against an independent model:

* real-valued trigonometry for the CORDICs;
* direct sums for the CIC;
* real-valued difference equations for the IIR and the loop filter;
* arithmetic identities for the accumulators;
* marker counts for the sequencer.

For every block, a deliberately broken copy has been shown to fail its
testbench.

The PLL has been simulated locking with a clean input. Its transient against
the loop bandwidth has not been characterised. ADC noise, clock jitter, and
an actual TTL-shaped marker through a real front end are not modelled. The
alignment accuracy therefore assumes a band-limited marker at the ADC.
