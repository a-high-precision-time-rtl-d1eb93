# DFPF: picosecond time intervals from the phase of a cross-spectrum

Two detector pulses of the same shape, one delayed by τ against the other, are
digitized by ADCs. Their cross-correlation, computed in the frequency domain, is

    R(k) = X1(k) · X2*(k) ≈ |S(k)|² · exp(j·2π·k·τ/N)

so within the band where the pulses carry energy its phase is a straight line
in the bin index k, with slope 2π·τ/N. Fitting that line by least squares over
all in-band bins averages the noise of every bin. The delay comes out with a
resolution far finer than the sample period, and there is no separate TDC.
The method is *digital frequency-domain phase fitting* (DFPF). It is the
subject of "A High Precision Time Measurement Method Based on Frequency-domain
Phase-Fitting for Nuclear Pulse Detection" (Wang, Bu et al.). That work
describes an FPGA prototype: 512-sample records at 40 MSPS, a 40 MHz clock,
and vendor FFT and CORDIC cores.

This repository holds synthesizable SystemVerilog for the datapath that sits
between those two cores and produces τ. It also holds self-checking
testbenches, including behavioural stand-ins for the FFT and CORDIC cores, so
the whole chain can be simulated from ADC samples to a measured delay.

## Data flow

```
 ADC 1 ─► FFT core ─┐                          ┌──────────── CORDIC core ◄───────────┐
                    ├─► cross_correlator ─► cc_* ports      (vendor, not included)   │
 ADC 2 ─► FFT core ─┘    R = X1·conj(X2)                          │                   │
  (vendor, not included)                                          ▼                   │
                                                  cd_* ports: A(k), P(k), k ──────────┘
                                                                  │
     coincide (A(k) ≥ threshold, k < N/2) ─► phase_fifo ─► phase_unwrap ─► phase_fit ─► τ
                                                                     Σ, products, seq_divider
```

| Module (`rtl/`)    | Role |
|--------------------|------|
| `dfpf_pkg`         | Shared constants: record length, word formats, the prototype's stage latencies, π and the slope-to-delay scale. |
| `cross_correlator` | Per bin, `Re R = Re1·Re2 + Im1·Im2` and `Im R = Im1·Re2 − Re1·Im2`, truncated to 40 bits. Two pipeline stages. |
| `coincide`         | Selects bin k when `A(k) ≥ amp_threshold` and `k < N/2`. It writes `{last, sel, k, P(k)}` to the FIFO. |
| `phase_fifo`       | Synchronous first-word-fall-through FIFO, 512 × 27 bits, with drop-and-flag on overflow. |
| `phase_unwrap`     | Removes 2π jumps between consecutive selected phases. |
| `phase_fit`        | Keeps running sums n, Σk, Σk², ΣP and ΣkP. At the end of a record it forms the numerator and denominator and divides, then scales the slope to τ. |
| `seq_divider`      | Radix-2 restoring divider, one quotient bit per clock. |
| `dfpf_tmm`         | Top level. It wires the above together and exposes the FFT and CORDIC interfaces as ports. |

The fitting step is the textbook closed form for the slope of a straight line:

    slope = (n·ΣkP − Σk·ΣP) / (n·Σk² − (Σk)²)        τ / Ts = slope · N / (2π)

Here n is the number of selected bins, and the sums run over the selected
bins k_n with their phases P(k_n).

## Number formats

Almost every width is a design choice. The method only asks for fixed point
with truncation. The chain, for the default N = 512:

| Signal | Format | Why |
|---|---|---|
| ADC sample (testbench side) | 16-bit signed | 16-bit ADC |
| X1, X2 from the FFT | 26-bit signed integer, unscaled | 16 + log2(512) + 1 bits of growth |
| R(k) to the CORDIC (`cc_re`, `cc_im`) | 40-bit signed, top 40 of the exact 53 bits | 13 LSBs truncated: a moderate CORDIC input width that still leaves \|R\| many bits of resolution in the band tails |
| A(k) from the CORDIC | 41-bit unsigned, same units as R | compared with `amp_threshold` |
| P(k) from the CORDIC | 16-bit signed radians, 13 fractional bits | range ±4 rad ⊃ (−π, π], 1.2·10⁻⁴ rad LSB |
| unwrapped phase | 24-bit signed, 13 fractional bits | ±1024 rad |
| running sums | exact, widths derived from N | no rounding until the division |
| slope (`res_slope`) | 32-bit signed rad/bin, 29 fractional bits | the numerator is shifted up 16 bits before dividing. Saturates at ±4 rad/bin |
| delay (`res_tau`) | 32-bit signed, units of Ts, 16 fractional bits | 0.38 ps LSB at 40 MSPS; range ±32768 Ts |

Rounding happens only at three points: the cross-correlation truncation, the
CORDIC phase LSB, and the quotient. The quotient is floored, and the τ scaling
is truncated. With noise-free 16-bit inputs the end-to-end error is a few
picoseconds at 40 MSPS.

The slope's sign convention: channel 2 later than channel 1 gives a positive τ.
This follows the correlation as written above. The prototype's block diagram
draws the conjugation on channel 1 instead, which would only invert the sign.

## Records, tags and timing

- **Input order.** The FFT cores must deliver bins in natural order k = 0 … N−1,
  one bin per clock, with both channels aligned. `spec_k` carries the index.
- **Tag through the CORDIC.** `cc_tag` carries the bin index into the CORDIC
  core, which must return it unchanged on `cd_tag`, as a pass-through user
  field does. The CORDIC latency may be anything.
- **End of record.** Bin N/2−1 is the last bin that can be selected. The
  coincidence stage always writes it to the FIFO with the `last` flag, so the
  fit can finish while bins N/2 … N−1 are still streaming (they are never
  selected).
- **Latency.** From bin N/2−1 entering `dfpf_tmm` to `res_valid`:
  2 (cross-correlation) + CORDIC latency + 1 (coincide) + 1 (FIFO) + 74
  (fit: one cycle for the products, one to start, 70 for the division, two to
  scale and register). With the prototype's 13-cycle CORDIC that is 91
  cycles. The prototype's figures leave 141 cycles at 40 MHz for everything
  after its FFT: 20.675 µs per record, less 12.8 µs of samples and 4.350 µs of
  FFT. Its divider alone took 122 cycles.
- **Throughput.** Records may follow each other back to back. The FIFO holds
  bins of the next record while the divider works. With the end-of-record rule
  above, the division normally finishes while the upper half of the spectrum
  streams by.
- **Errors.** A record with fewer than two distinct selected bins returns
  `res_err = 1` with zero slope and τ. `fifo_overflow` pulses if a selected
  bin is dropped; this cannot happen with one bin per clock and the default
  depth.

## Phase unwrapping

The CORDIC folds phases into (−π, π]. The cross-spectrum phase rises by
2π·τ/(N·Ts) per bin. At τ = 1 µs and 40 MSPS that is 0.49 rad per bin, so
across 70 in-band bins it passes ±π several times, and a straight-line fit of
folded phases would be meaningless. `phase_unwrap` keeps the previous selected
phase and a running multiple of 2π. When consecutive selected phases differ by
more than π, it adds or subtracts 2π. The first selected bin of each record
starts at offset 0.

The stage assumes that two consecutive selected bins differ by less than π.
That holds for |τ| < N·Ts/(2·gap), where gap is the bin distance between
them. Unwrapping is this design's addition: the published description does not
mention it, but its measurements cover delays up to 1 µs, which need it.

## Interfaces of the top level (`dfpf_tmm`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; active-low asynchronous reset |
| `amp_threshold` | in | 41 | coincidence threshold on A(k) |
| `spec_valid`, `spec_k` | in | 1, 9 | one bin of both spectra, and its index |
| `x1_re`, `x1_im`, `x2_re`, `x2_im` | in | 26 each | FFT outputs |
| `cc_valid`, `cc_tag`, `cc_re`, `cc_im` | out | 1, 9, 40, 40 | R(k) to the CORDIC core |
| `cd_valid`, `cd_tag`, `cd_amp`, `cd_phase` | in | 1, 9, 41, 16 | A(k), P(k) from the CORDIC core |
| `res_valid`, `res_err`, `res_slope`, `res_tau`, `res_n` | out | 1, 1, 32, 32, 9 | one result per record |
| `fifo_overflow` | out | 1 | a selected bin was lost |

Choosing the threshold: |R(0)| equals the squared pulse area divided by 2¹³.
For a Gaussian pulse of peak a and σ samples, that is (a·σ·√(2π))² / 8192.
The testbenches use 5% of it. A higher threshold of 20% (roughly the band edge
drawn in the method's illustration) gave about the same precision.

## What is not here

- **ADC, FFT cores, CORDIC core.** These are bought parts and vendor IP in the
  prototype. `dfpf_tmm` exposes their interfaces as ports.
  `tb/fft_model.sv` and `tb/cordic_model.sv` are floating-point behavioural
  models, for simulation only. The FFT model has a 174-cycle latency and the
  CORDIC model 13 cycles, the prototype's 4.350 µs and 0.325 µs at 40 MHz.
- **Multi-channel arrangement.** The prototype is said to scale to 16
  channels. One `dfpf_tmm` handles one channel pair; how pairs and cores would
  be shared is not specified.
- **Link to a host computer.** The result ports are where a readout would
  attach.

## Departures and own choices, in one list

1. Conjugate on channel 2 (X1·X2*), not on channel 1 as in the block diagram:
   sign of τ only.
2. All word widths, the 13-bit truncation after the complex multiply, and the
   16 extra quotient bits.
3. `≥` threshold on A(k), restricted to k < N/2. The threshold is a run-time input.
4. A record ends at bin N/2−1, marked in the FIFO word. The bin index travels
   through the CORDIC core as a tag.
5. Phase unwrapping stage (added).
6. Final conversion of the slope to τ in sample periods (the method stops at
   the slope).
7. Restoring divider of 71 cycles (the prototype's took 122).
8. Active-low asynchronous reset everywhere except the FIFO storage array.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_cross_correlator` | random and full-scale bins against 64-bit integer reference; 2-cycle latency |
| `tb_coincide` | selection and record-end flag against a reference, threshold edge cases |
| `tb_phase_fifo` | order, empty/full/count every cycle, overflow drop, random traffic against a queue model |
| `tb_seq_divider` | 305 divisions against the `/` and `%` operators, zero divisor, latency DW+1 |
| `tb_phase_fit` | 26 records of points on random lines, with noise, gaps and stalls, against a floating-point least-squares fit; error records; 74-cycle latency |
| `tb_phase_unwrap` | 23 records of folded phases on random lines up to ±2.4 rad per bin, with noise, unselected entries and output back-pressure; exact unwrapped value and count of 2π steps |
| `tb_dfpf_tmm` | end to end at default size. Gaussian pulses through the FFT model, the datapath and the CORDIC model; τ = −1 µs … +1 µs noise-free within 50 ps, two records at 64 dB, one record with no bin above threshold; latency ≤ 141 cycles; counts selections, rejections, unwrap steps and error results |
| `tb_dfpf_precision` | 48 noisy records (64 dB) for each of three pulse settings; reports RMS spread and bias |

Results of `tb_dfpf_precision` (default parameters, 64 dB SNR taken as peak
amplitude over noise RMS, τ = 10 ns):

| Pulse FWHM, sampling | RMS of τ (this RTL) | Published for the prototype |
|---|---|---|
| 117.75 ns, 40 MSPS | ≈ 69 ps | 44.6 ps measured, 35 ps simulated |
| 10.127 ns, 100 MSPS | ≈ 15 ps | 18 ps |
| 2.826 ns, 500 MSPS | ≈ 3.4 ps | 2.9 ps |

The datapath works in sample units. The three settings therefore differ only
in pulse width in samples and in picoseconds per sample. Real-time operation
at 100 or 500 MSPS would need a clock at the sample rate; the published
results at those rates were processed offline.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -y rtl -y tb +libext+.sv \
    rtl/dfpf_pkg.sv tb/tb_dfpf_tmm.sv --top-module tb_dfpf_tmm
./obj_dir/Vtb_dfpf_tmm
```

Replace `tb_dfpf_tmm` by any other testbench name. The simulator resolves
the modules it needs through `-y`. `--assert` enables the two protocol
assertions: FIFO read while empty, and divider restarted while busy. All
testbenches finish in well under a second of CPU time.

To change the record length, override `N` on `dfpf_tmm` (a power of two). The
FIFO depth, sum widths, the slope-to-τ constant N/(2π) and the
record-end bin all follow from it. If N grows beyond 512, widen `SPEC_W` by one
bit per doubling, and keep `CC_W` at or below 2·`SPEC_W`+1.
