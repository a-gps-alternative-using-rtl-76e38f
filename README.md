# Chirp time transfer over a transmission grid: RTL of the central node and a substation receiver

A high-voltage transmission line can carry timing. A central node holds good time: a GNSS
receiver, backed up by an atomic clock. At the start of every second it sends a train of chirps
onto the line. Each substation receiver dechirps what arrives, using a downchirp that starts on
its own 1PPS. The position of the correlation peak then says how late the chirp arrived
relative to that local second.

While the substation still has GNSS, the local second is correct. The lateness is then the time
of flight (TOF) along the line, and the receiver learns it by averaging. When GNSS is lost, the
central node keeps sending on the atomic clock's second. Any change in the measured lateness is
now the drift of the local clock. Subtract the learned TOF and you have the local clock's
offset, and from it a corrected 1PPS.

This SystemVerilog implements both ends of that link on the hardware configuration described for
the prototype:

- 10,485,760 Hz GNSS-disciplined clock (Fclk);
- 1.25 MHz carrier;
- spreading factor 10, a 327.68 kHz chirp bandwidth and 3.125 ms chirps;
- 32 fine shifts, which give a resolution of one Fclk period, 95.367 ns.

## The measurement: D, TOF and T

The demodulation index **D** is the distance of the correlation peak from the *reference line*.
The reference line is where a chirp with zero delay would peak. D counts leftwards, in Fclk
ticks (fine steps), and runs from 0 to 32,767. One chirp spans 32,768 ticks, so D is ambiguous
modulo 3.125 ms. That is far longer than any line delay in a national grid: 900 km at close to
the speed of light.

The receiver runs in one of two stages, chosen by its `gnss_valid` input.

- **Calibration** (GNSS present): each D is a TOF observation. A moving average over the last
  `MA_LEN` observations (2,000 by default) gives `tof_bar`, which carries 8 fractional bits.
- **Implementation** (GNSS lost): the average freezes. The receiver then outputs
  **T = D − TOF̄**, which is signed, carries 8 fractional bits and wraps modulo one chirp.
  - T is positive when the local second starts *early* relative to the central node.
  - The corrected 1PPS is issued `round(T)` ticks after the local 1PPS, modulo one second.
  - `pps_out` carries the local 1PPS during calibration and the corrected pulse during
    implementation.

## Where the 95 ns resolution comes from: 32 shifted chirps

One LoRa-style chirp has 1,024 samples at the chirp bandwidth B = Fclk/32. Dechirping and then
taking a 1,024-point FFT correlates the received chirp with all 1,024 cyclic shifts of the
reference at once. On its own, that resolves only 1/B = 32 Fclk ticks.

The transmitter closes that gap with 32 chirps per cycle:

- It reads one stored 32,768-sample passband chirp through a 15-bit address counter at Fclk.
- For chirp *h* of each cycle of 32 (h = 0..31), it adds *h* to the read address. Chirp h
  therefore leaves h ticks early.
- The receiver keeps its sampling grid fixed to its own second, so across the 32 chirps it
  sees the same waveform at 32 fine offsets.

For each chirp the receiver finds the FFT peak (bin *b*, squared magnitude). At the end of the
cycle it keeps the strongest of the 32 peaks and forms

    D = 32 · ((1024 − b) mod 1024) + h_best

The first term is the coarse delay in whole chirp samples, counted leftwards. The second is the
fine shift that lined the transmitted chirp up best with the receiver's sample grid. This
reproduces a 32,768-point correlation with 32 FFTs of 1,024 points. One D is produced per
32-chirp cycle, which is 10 per second.

There are two details to get right:

- **The chirp is centred before it is dechirped.** The stored chirp sweeps from the carrier up to
  carrier + B. The receiver mixes with a local oscillator at carrier + B/2, so the baseband
  chirp runs from −B/2 to +B/2. The downchirp in the receiver's RAMs is the exact phase
  integral of that sweep, exp(−jπ(n² − 1024 n)/1024). With this phase, one sample of delay
  moves the peak by exactly one bin.
- **A fixed offset is learned, not designed away.** Some pipeline latency is common to the
  calibration and implementation stages: converters, the mixer and decimator, and which tick of
  a sample period is taken. It makes D differ from the true delay by a few ticks. Calibration
  absorbs it into TOF̄, so T does not see it. Only a delay that changes between the two stages
  matters.

## Central node (`ptn_transmitter`)

- **`tx_sequencer`**: selects the time source and drives the chirp RAM.
  - Time source: the GNSS 1PPS while `gnss_valid` is high, the atomic clock's 1PPS otherwise.
    Each 1PPS goes through a 3-flop synchroniser.
  - On each selected edge it restarts the 15-bit counter `m` and the shift `h`.
  - The RAM address is `m + h` (mod 32,768). `h` advances each time `m` wraps.
  - The output stays muted until the first 1PPS.
- **`tx_chirp_ram`**: 32,768 × 12-bit samples of cos(2π·(m² + 250000·m)/2²¹), that is a
  1.25 MHz carrier plus a linear sweep of B over the chirp.
  - After reset a loader fills it from a 1,024-point sine table (`sine_lut`, a quarter wave
    held as a constant case table), one sample
    per clock, then raises `ready`.
  - Reads are synchronous.
- **`cic_interpolator`**: third-order CIC with R = 6. It takes the Fclk samples to a DAC clock
  of 6·Fclk = 62.9 MHz, which is close to the prototype's 65 MSPS.
  - The samples cross into the DAC clock domain with a toggle handshake and a 3-flop
    synchroniser.
  - The gain R^(N−1) is divided back out, so the DAC sees the same amplitude.

The carrier phase jumps by a quarter cycle at each chirp boundary, because 3.125 ms × 1.25 MHz
is 3906.25 cycles. The receiver only ever correlates within one chirp, so this does no harm.

## Substation receiver (`ptn_receiver`)

The samples pass through the following chain, in order:

1. **`impulse_clipper`**: limits impulsive noise on the ADC samples.
   - Any sample with |x| ≥ T_clip is replaced by ±T_clip, where T_clip = M · N90.
   - N90, the 90th percentile of |x|, comes from a 64-bin histogram collected over 4,096
     samples while `clip_measure` is high. It is scanned in 64 cycles and rounded up to a bin
     edge (32 ADC codes).
   - M is an input in unsigned 4.4 format; M = 2 is `8'h20`.
   - With `clip_en` low, or before the first window is complete, samples pass unchanged.
   - One cycle of latency.
2. **`rx_frame_timer`**: the receiver's own chirp grid, started by the local 1PPS. It gives the
   tick `m`, the sample index n = m/32 and the chirp index h. It also gives a `dump` strobe on
   the last tick of each sample period, which acts as Sclk.
3. **`rx_downconverter`**: mixes down to baseband and decimates by 32.
   - A 17-bit NCO at carrier + B/2 drives a complex mixer with 12-bit cos/sin.
   - A second-order integrate-and-dump filter (a CIC decimator by 32) follows.
   - Each 16-bit baseband sample comes out 5 cycles after its `dump`, carrying its n and h as
     tags.
4. **`rx_chirp_ram` + `dechirp`**: two 1,024 × 10-bit RAMs hold the real and imaginary parts
   of the downchirp. They are filled by a loader after reset. `dechirp` multiplies each sample
   by entry n, with 2 cycles of latency and 18-bit output.
5. **`fft1024`**: a 1,024-point radix-2 decimation-in-time FFT.
   - Samples are written in bit-reversed order into one bank while the other bank is
     transformed. The banks swap when a symbol is complete.
   - One butterfly per clock: 5,120 cycles per symbol, against the 32,768 cycles a chirp
     lasts.
   - Each stage rounds and halves, and twiddles are 12-bit. The output streams in natural bin
     order, less than 5,220 cycles after the last input.
   - `overrun` flags a symbol that completed while the previous one was still being
     transformed. It should never happen at the built rates.
6. **`peak_search`**: finds the bin with the largest |X|² in each symbol. On a tie the lower
   bin wins.
7. **`fine_combiner`**: keeps the strongest peak over h = 0..31 and emits D at the end of a
   complete cycle. A cycle with a missing symbol produces no D.
8. **`moving_average`**: a circular history of `MA_LEN` values and a running sum, followed by
   a restoring divider. It takes 35 cycles per update. It accepts observations only in
   calibration and can be cleared with `ma_clear`.
9. **`timing_estimator`**: synchronises `gnss_valid` and sets the stage. It pulses
   `stage_change` on a change and forms T from each D once TOF̄ exists.
10. **`pps_discipline`**: counts Fclk ticks from the local 1PPS and fires the corrected pulse
    T ticks later.

A D appears about 6,200 Fclk cycles after the last chirp of its cycle. T, and hence the
correction, follows one cycle after D.

## Top level (`ptn_top`)

`ptn_top` carries both halves. They share only `fclk` and `rst_n`: a central node uses the
`tx_*` side and a substation the `rx_*` side.

The parts outside the chip appear as ports:

- the GNSS timing modules: `tx_pps_gnss`, `rx_pps_local`, `*_gnss_valid` and `fclk`;
- the atomic clock: `tx_pps_atomic`;
- the DAC: `dac_data` on `dac_clk`;
- the ADC: `adc_data` on `fclk`.

The capacitive coupling to the line sits beyond the converters and has no port.

The top's parameters are:

| Parameter | Default | Meaning |
|---|---|---|
| `MA_LEN` | 2000 | TOF moving-average window (observations) |
| `TICKS_PER_SEC` | 10,485,760 | Fclk ticks per second; must be a multiple of 32,768 |
| `CIC_R`, `CIC_N` | 6, 3 | DAC interpolation ratio and CIC order |

Some values are fixed in `ptn_pkg`: SF = 10, 32 shifts, the word widths and the NCO
increments. Changing them means regenerating the constants, not just setting a parameter.

## Departures from the published description, and choices it leaves open

- **Clock rates.** The prototype text says the transmitter PLL divides a GNSS clock by two, and
  that Sclk is "32 times slower than Fclk/2". Its configuration table needs all of the
  following at the full Fclk:
  - B = Fclk/32 = 327.68 kHz;
  - 32,768 samples per 3.125 ms chirp;
  - a 95.367 ns resolution.

  This design follows the table. The 15-bit counter and Sclk are derived from Fclk directly,
  and there is no PLL.
- **Downchirp phase.** The equations print the chirp phase as 2π·n²/2^SF. The RAMs here hold
  π·(n² − 1024 n)/1024 instead, for the reasons given above.
- **Corrected 1PPS.** The original description writes it as 1PPS_local + (1 − T). Here, with T
  positive for an early local clock, it is 1PPS_local + T. Both name the same instant.
- **Where the fine shift is applied.** The mathematical description shifts the received waveform
  by h fine steps. The prototype description puts the shift logic in the transmitter. This
  design follows the prototype, and the receiver's grid never moves.
- **Strongest peak, not rightmost spike.** The text reads the TOF from the rightmost spike and
  ignores later multipath spikes further left, but it defines D as the arg max. This design
  takes the arg max. A multipath echo stronger than the direct path would therefore be
  mistaken for it.
- **Rate of observations.** The experiment sampled one chirp per second. Here every 32-chirp
  cycle gives an observation, 10 per second, so a 2,000-value window fills in 200 s.
- **Not specified, chosen here:**
  - the direction of the fine shift (the address advances);
  - the CIC ratio and order;
  - the downconverter structure;
  - the FFT architecture and scaling;
  - the magnitude measure;
  - the word widths;
  - the percentile estimator and window of the clipper, and the format of M;
  - reset behaviour: RAMs are loaded after reset, and the receiver starts in calibration.
- **Not built:**
  - the simulation-study configuration (SF 13, 100 shifts, an 819,200-point correlation).
    It is a different size, fixed in the package.
  - any unwrapping of D across the chirp boundary. A TOF or a drift of more than ±1.56 ms
    aliases.

## Verifying and using the RTL

Each module has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M`. The package must be compiled first and the other modules are
found through `-y`. For example:

    verilator --binary --timing --assert -y rtl -y tb --top-module tb_fft1024 \
        rtl/ptn_pkg.sv tb/tb_fft1024.sv
    ./obj_dir/Vtb_fft1024

What the testbenches check:

- **Block level.** Reference values are computed in the testbench:
  - a floating-point DFT for the FFT (6-LSB tolerance);
  - a floating-point CIC model;
  - the histogram percentile for the clipper;
  - the exact chirp and downchirp phases for the RAMs.
- **`tb_ptn_receiver`.** A floating-point model of the line signal with a known delay and
  noise.
- **`tb_ptn_top`.** The transmitter's output goes through a 39-tick line model: the
  prototype's 700 m cable, attenuated, with noise and ±2,000-code impulses.
  - It runs a shortened second of one chirp cycle and a 2-observation average.
  - It checks calibration, the switch to the atomic clock, and local-clock drifts of 25 and
    60 ticks.
  - T must come within ±2 ticks, and the corrected 1PPS must land within ±2 ticks of the
    central node's second.
  - It counts every mechanism: shift wraps, clipped samples, D, a full window, the stage
    change, atomic timing, T and corrected pulses.
  - It runs in about 20 s.
- **`tb_ptn_top_full`.** The same run at every default: a real 10,485,760-tick second and a
  2,000-value window. It covers two seconds, about 21 million cycles, in about a minute.

Not verified:

- The claimed sub-µs accuracy at −20 dB SNR, and behaviour under α-stable noise. The
  testbenches use a few dB of SNR.
- Operation against the real converters and line.

How far to trust each part:

- Timing to within ±2 ticks of the expected value is verified end to end.
- The fixed offset between D and the true delay is about −2 ticks in simulation and depends on
  the converters. Calibration removes it.
