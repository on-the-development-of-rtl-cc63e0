# A multi-channel all-digital phasemeter core for 4.096 GSPS RF data converters

A phasemeter follows a tone in a digitized signal and reports how its phase
and frequency change. It does this with an all-digital phase-locked loop
(ADPLL). A numerically controlled oscillator (NCO) is mixed with the input.
The quadrature product Q is the phase error, and a PI servo steers the NCO
frequency until Q is near zero. Once the loop is locked, the NCO frequency
word, the phase increment register (PIR), is a copy of the input frequency.
Integrating the PIR gives the input phase. The in-phase product I measures
the amplitude.

The problem this core solves is speed. The converters sample at 4.096 GSPS,
but the programmable logic runs at most at 512 MHz. So every clock carries
eight samples, and the whole loop has to handle eight samples per clock
without running slower. The core does this with three structures:

* **Multi-phase accumulation.** Eight phase accumulators produce eight
  consecutive NCO phases per clock. Together they form one continuous phase
  ramp at 4.096 GSPS.
* **Multi-demodulation.** Eight mixer pairs demodulate the eight samples in
  parallel, each with its own sine/cosine table.
* **A rolling 16-sample sum as the loop low-pass filter.** It is built from
  short registered additions so that it closes timing at 512 MHz.

This keeps the signal bandwidth at the full Nyquist band of 2.048 GHz. The
loop delay stays at 12 clocks, which allows a tracking (unity-gain) bandwidth
of about 2 MHz.

The SystemVerilog implements the core for eight converter channels. Each
channel has two ADPLLs: one for the main tone and one for a pilot tone used
later to remove converter clock jitter. That makes 16 loops. It also includes
each loop's readout decimators, a residual-phase-error meter, a noise
injector for measuring the open-loop gain, and the register bank. The RF
converters, the processor that writes the registers and collects the data,
and the on-chip logic analyser are not included. Their signals are ports of
the top module `ghz_phasemeter`.

## One ADPLL, stage by stage

```
 adc[8] ─────────────┬──────────────► pm_demod ──► pm_avg16 (Q) ─► pm_q_trunc ─┬─► Q readout, Q² meter
                     │                 ▲   │                                    └─► Q·2^-C ─► pm_pi_servo
                     │                 │   └─────► pm_avg16 (I) ─► I readout                      │
                     │      pm_sincos_lut ×8                                                       │ u
                     │                 ▲                                                          ▼
                     │           pm_phase_acc ◄─── PIR (16 b) ◄── dithered trunc ◄── f0 + u (+ noise)   pm_pir
```

| stage | module | word | latency (clocks) |
|---|---|---|---|
| phase accumulators | `pm_phase_acc` | 8 × 16-bit phase | 1 |
| sine/cosine tables | `pm_sincos_lut` (×8) | 16-bit signed, ±32767 | 1 |
| mixers | `pm_demod` | 12 × 16 → 28-bit | 1 |
| rolling sum of 16 | `pm_avg16` (I and Q) | 32-bit | 4 |
| Q truncation, 2^-C | `pm_q_trunc` | 18-bit Q | 1 |
| PI servo | `pm_pi_servo` | 32-bit correction | 2 (P), 3 (I) |
| f0 + u + noise, PIR truncation | `pm_pir` | 32-bit → 16-bit | 2 |

One full turn of the loop therefore takes 12 clocks (23.4 ns). This is the
delay D of the loop model. It sets the highest stable bandwidth.

### The multi-phase NCO

The PIR is the phase advance per **sample**, as a fraction of a cycle in 16
bits. So PIR = f / 4.096 GHz · 2^16, and one LSB is 62.5 kHz. Accumulator k
(k = 1..8) computes

    phase_k(n) = phase_8(n−1) + k · PIR(n)

Phase 8 of the previous clock is the last sample's phase. Each output k adds
k increments to it. Phase 8 then advances by 8·PIR per clock, and the eight
outputs are the phases of samples 8n+0 … 8n+7. No accumulator depends on
another's current value, only on the registered phase 8 and a constant
multiple of the PIR. That keeps the feedback path to one adder.

Each phase addresses its own 1024-entry table with its upper 10 bits. The
table holds round(32767·sin(2πi/1024)). The cosine is read from the same
table a quarter turn later. The lower 6 phase bits are dropped. The table is
filled from this formula when the design starts, so no data file is needed.

### Phase detector and low-pass filter

Sample k is multiplied by cos φ_k and by −sin φ_k. For an input A·cos φ_in,
the slow part of the Q product is (A/2)·32767·sin(φ_in − φ_nco). So Q is
positive when the input leads, and the servo then raises the frequency.

`pm_avg16` adds the eight products of a clock in a registered 8-4-2-1 tree.
It then adds the previous clock's eight-sum, which gives a sum over the last
16 samples every clock. This box filter removes most of the 2f product. What
is left shows as a small ripple in Q; with a 1 GHz input it is about 3.5 % of
the signal term.

### Truncations and dither

Two truncations keep the loop words short, and both add uniform LFSR dither
first. That makes the rounding error white and unbiased.

* **Q: 32 → 18 bits.** The 32-bit sum is shifted right by 14 and saturated.
  This 18-bit Q is what the readout sees. A second, programmable right shift
  C (the 2^−C gain stage) gives the servo input.
* **PIR: 32 → 16 bits.** f0 and the servo correction are added at 32-bit
  precision. The top 16 bits, after dithering the lower 16, drive the NCO
  and the PIR readout. The averaged PIR therefore keeps sub-LSB resolution.
  `tb_pm_pir` checks that a constant word reads back to within 0.02 LSB.

### Servo and loop gain

The servo computes u = (kp·e ≫ sp) + (Σ ki·e ≫ si). It has a 48-bit
saturating integrator and a 32-bit saturating output. u is in units of the
32-bit frequency word, so 2^32 = 4.096 GHz. The loop gain per clock is

    g = kp·2^−sp · K_d · 8 · 2π / 2^32   [rad/clock],   K_d = 16·A  (Q LSB per rad, C = 0)

where A is the input amplitude in ADC LSB. The unity-gain frequency is about
g · 512 MHz / 2π. For A = 1500, kp = 90 gives g = 0.025, a unity-gain
frequency of about 2.0 MHz. The model of the next section includes the
12-clock delay and the integral corner. It gives 64° of phase margin and
14 dB of gain margin, with the phase crossing −180° near 10.5 MHz. ki = 21 with si = 6 puts the integral corner near 300 kHz. These are
the settings used in all closed-loop testbenches. Since K_d scales with A, a
weaker tone needs a proportionally larger kp. The pilot loops in the
testbenches (A = 500) use kp = 270, ki = 63. With servo_en = 0 the
integrator is cleared and the loop is open, so the NCO runs at f0.

The bandwidth matters when the input phase moves quickly. In
`tb_pm_dual_bw`, both loops of one channel follow the same tone, which
carries 0.3 rad of phase modulation at 250 kHz. Loop 0 runs at about 2 MHz
(kp = 90) and leaves 0.018 rad rms. Loop 1 runs at about 100 kHz (kp = 72,
sp = 4) and leaves 0.20 rad rms. I depends on the cosine of the remaining
error, so loop 1 also reads an amplitude about 2 % low. The error is always
in that direction.

### Open-loop gain measurement

`pm_gauss_noise` sums four uniform 16-bit LFSR words. The result is close to
Gaussian, with kurtosis 2.7. It is scaled by a 16-bit amplitude; the standard
deviation is 0.577 × amplitude, in LSB of the 32-bit word. When the noise
switch is on, it is added together with f0 to the servo output. `pm_pir`
registers the word before the noise adder and the word after it. Both leave
the core as `mon[p].before_noise` and `mon[p].after_noise`, for an external
logic analyser. The open-loop gain is then G = −before/after.

With a record of both words, n = after − before is the injected noise itself.
The ratio of cross-spectra G(f) = −S(before, n) / S(after, n) uses n as the
reference, so the loop's response to the truncation dither averages out.
`tb_pm_olg` does exactly this on a loop locked to a 1 GHz, 1500 LSB tone at
full noise amplitude, over 2048 records of 1024 clocks. The measured
|G| is 4.93, 1.04 and 0.253 at 0.5, 2 and 8 MHz. The loop model below gives
4.79, 1.04 and 0.257, and the phases agree within 12°:

    G(z) = K_d·8·2π/2^32 · (1 + z^−1)/2 · (kp + ki·2^−si·z^−1/(1 − z^−1)) · z^−12/(1 − z^−1)

The terms are, in order: phase detector, rolling average, PI servo, loop
delay and the NCO's phase accumulation. The 2f term of the demodulation
also shows up here. At 1 GHz it aliases to 48 MHz, and it appears as a
ripple in Q with a period of about 10.7 clocks.

The measurement needs the noise to be white. Each LFSR therefore advances 16
steps per clock for the noise (32 for the dither). With one step per clock,
successive 16-bit words overlap in 15 bits, and their correlation is about
−0.25. That coloured noise gave open-loop gain estimates that were off by up
to a factor of 20.

### Readout

* **PIR, Q and I** each pass through a second-order CIC decimator
  (`pm_cic2`), all three with the same run-time factor R. The output is the
  double box sum Σ_{a,b<R} x[n−a−b]. Divide by R² for the mean. R = 51200
  gives 10 kHz, R = 2^24 gives 30.5 Hz; any R from 1 to 2^24 works. No bits
  are dropped: the output widths are 65, 66 and 80 bits.
* **Q²** (`pm_q2_meter`). Q is averaged in blocks of 16 (512 → 32 MHz),
  squared, and summed over R₂ squares by a first-order CIC. Divide by R₂ and
  by K_d² for the mean-square phase error in rad². This is the residual
  phase error of the loop, available while it tracks.
  `tb_pm_q2_residual` tests this with a 1 GHz tone carrying 0.2 rad of
  phase modulation at 1 MHz, at four proportional gains. The unity-gain
  frequencies range from about 0.7 to 2.7 MHz. The rms values it reads are
  0.149, 0.104, 0.073 and 0.054 rad. The loop model predicts
  0.2·|1/(1+G)|/√2, times the small losses of the two averages, and agrees
  to within 0.3 %. Without modulation the floor is 0.004 rad, mostly the
  part of the 2f ripple that the prefilter lets through.

Each readout has a one-clock strobe (`rd[p].valid`, `rd[p].q2_valid`).

The measured phase comes from the PIR readout. Successive CIC2 outputs
overlap-add, so Σ_k y_k / R is exactly the sum of the full-rate PIR values.
The phase in cycles is therefore 8 · Σ_k y_k / (R · 2^16). `tb_pm_zero_meas`
rebuilds the phase this way from two loops that track the same 24.8 MHz
tone, with different dither seeds. The tone steps by 200 kHz in the
middle of the run. After the step, the phase advance over 64 readouts
matches the input to within 1 mrad. The two loops' phases differ by 0.6 mrad
rms and at most 1.9 mrad, including the step. This is the digital part of a
zero-measurement. The analogue splitter and converter noise that set the
real floor are not modelled.

## Register map

`pm_regs` uses a simple synchronous bus. A write takes effect on a clock with
`reg_wr_en`; reads are combinational. Address = {ADPLL[3:0], reg[2:0]}.
ADPLL 2c is the main loop of channel c and 2c+1 its pilot loop.

| reg | bits | content | reset |
|---|---|---|---|
| 0 | 31:0 | f0, = f / 4.096 GHz · 2^32 | 0 |
| 1 | 17:0 | kp (signed) | 0 |
| 2 | 17:0 | ki (signed) | 0 |
| 3 | 5:0 sp, 13:8 si, 20:16 C, 24 servo_en | shifts and servo enable | 0 (loop open) |
| 4 | 15:0 amplitude, 31 switch | noise injection | 0 |
| 5 | 24:0 | R of the PIR/Q/I CICs (0 is stored as 1) | 51200 (10 kHz) |
| 6 | 20:0 | R₂ of the Q² CIC at 32 MHz (0 is stored as 1) | 3200 (10 kHz) |

## Top-level interface (`ghz_phasemeter`)

| port | width | meaning |
|---|---|---|
| `clk`, `rst` | 1 | 512 MHz clock; synchronous active-high reset |
| `adc[c][k]` | 8 × 8 × 12 signed | sample k (oldest first) of channel c in this clock |
| `reg_wr_en/addr/data`, `reg_rd_addr/data` | 1/7/32, 7/32 | register bus |
| `rd[p]` | `adpll_rd_t` × 16 | decimated PIR, Q, I and Q², with strobes |
| `mon[p]` | `adpll_mon_t` × 16 | frequency word before/after noise, every clock |

Types and widths are in `pm_pkg`. The converters must deliver eight samples
per clock in time order.

## What follows the source design and what is chosen here

These come from the published description of the instrument:

* the 4.096 GSPS / 8-samples-per-512 MHz-clock structure;
* eight phase accumulators and eight look-up tables per loop;
* IQ demodulation;
* the 16-sample rolling average built from consecutive additions;
* Q as the error signal of a PI servo;
* f0 added to the servo output;
* the dithered truncations of Q and of the PIR, the latter to 16 bits;
* the 2^−C gain stage;
* the switchable, adjustable Gaussian noise and the two monitored words;
* second-order CIC readout of PIR, Q and I between 10 kHz and 30.5 Hz;
* the Q² readout with a 32 MHz prefilter and a first-order CIC;
* two loops per channel and eight channels.

These are this implementation's own choices, because the description gives
no values for them:

* all remaining widths: 32-bit f0, 1024 × 16-bit tables, 18-bit Q, 18-bit
  gains with shifts, 48-bit integrator;
* the register split that gives the 12-clock loop delay;
* the sign convention;
* the LFSR dither and noise sources;
* the boxcar Q² prefilter;
* the register map and bus;
* the reset values;
* the servo-enable bit.

Known departures and limits:

* The loop has 12 clocks of delay. The source design reports a 2.00 MHz
  unity-gain frequency with 43.3° of phase margin and 7.03 dB of gain
  margin. Put into the same loop model, those margins point to about 26
  clocks of delay: its pipeline is deeper. At equal gains this design
  therefore has more margin (64°, 14 dB). Equivalently, it could run at a
  somewhat higher bandwidth before it becomes unstable. The gains in the
  testbenches were not raised to use that margin.

* The 1/16 of the average is not applied; it is absorbed into the Q shift
  and the gains.
* The NCO phase is truncated to 10 bits without dither or interpolation.
  The largest phase-truncation spurs are then about 60 dB below the
  carrier, by the usual rule of 6 dB per table address bit. Their effect on
  the phase noise floor was not analysed.
* At the largest amplitude setting the injected noise is about 0.58 LSB of
  the 16-bit PIR (36 kHz rms). With a 1500 LSB tone this is enough to
  measure the open-loop gain from 0.5 to 8 MHz (see above). Weaker tones or
  other bands may need longer records.
* Pilot-tone jitter correction, phase unwrapping and scaling of the readout
  happen in software and are not part of this core.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_pm_phase_acc` | exact phase ramp for random PIR, including full scale |
| `tb_pm_sincos_lut` | every table entry against floating-point sin/cos (±1 LSB), latency |
| `tb_pm_demod` | exact products, including the extreme values |
| `tb_pm_avg16` | 16-sample window and 4-clock latency against a reference sum |
| `tb_pm_q_trunc` | floor((sum+dither)/2^14), saturation, 2^−C |
| `tb_pm_pi_servo` | bit-exact against a 64-bit integer model, step latency, saturation |
| `tb_pm_gauss_noise` | zero when off; mean, deviation, bound and kurtosis; whiteness (lag-1 correlation); scaling with amplitude |
| `tb_pm_pir` | sums, truncation, unbiased dithered mean |
| `tb_pm_cic2` | bit-exact double box sum for R = 1, 2, 5, 17, 64; strobe spacing |
| `tb_pm_q2_meter` | bit-exact against a reference for several R₂ |
| `tb_pm_regs` | reset values, every field of every loop, read-back |
| `tb_pm_adpll` | open loop; lock from +1 and −2 MHz; mean phase error, I; all readouts; noise injection while locked |
| `tb_pm_channel` | main (1 GHz) and pilot (100 MHz) loops of one channel lock to their own tones; each loop's I, Q and strobes; noise switched on one loop only |
| `tb_pm_workloads` | FM at 30 kHz with 4 MHz peak-to-peak (peak 377 GHz/s): max phase error 0.14 rad; acquisition from ±4.1 MHz at 2 GHz; lock to 24.8 MHz |
| `tb_pm_olg` | open-loop gain measured from the two monitor words with injected noise, against the loop model at 0.5, 2 and 8 MHz |
| `tb_pm_q2_residual` | Q² readout as residual phase error at four loop gains, against the loop model |
| `tb_pm_dual_bw` | one phase-modulated tone tracked by both loops of a channel at about 2 MHz and 100 kHz bandwidth: both stay locked; residual error from Q² and the drop of I in the slow loop, against the loop model |
| `tb_pm_zero_meas` | phase rebuilt from the PIR readout of two loops on one 24.8 MHz tone with a frequency step: phase advance against the input, difference between the loops |
| `tb_ghz_phasemeter` | the full 8-channel, 16-loop core at default size, configured over the register bus: open loop, lock of all 16 loops (tones 100 MHz – 1.91 GHz), noise injection on one loop, readout rate change, Q² strobes |

The testbenches generate their input tones themselves, with floating-point
cos(), and need no data files. To run one with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/10ps -Wno-fatal \
        --top-module tb_pm_adpll \
        rtl/pm_pkg.sv $(ls rtl/*.sv | grep -v pm_pkg) tb/tb_pm_adpll.sv
    ./obj_dir/Vtb_pm_adpll

The package has to come first. `-Wno-fatal` keeps width warnings in the
testbenches from stopping the build. The full-size `tb_ghz_phasemeter` runs in well
under a minute. The block testbenches take seconds.

Loop dynamics were checked in simulation with synthetic tones only. No
converter noise, clock jitter or laser phase noise was modelled, and timing
closure at 512 MHz was not checked with any FPGA tool.
