# HermEIS core: multichannel impedance spectroscopy from quarter-period sums

Electrochemical impedance spectroscopy (EIS) drives an electrode with a small sinusoid and
records the current it draws. The result, magnitude and phase against frequency, shows the
state of the electrode–tissue interface. Measuring a whole frequency sweep on every channel
of a large microelectrode array is slow, for two reasons. The usual instruments multiplex
one potentiostat over many electrodes. They also resolve each frequency by fitting or
Fourier-transforming several periods of raw samples.

This core takes a different route. It samples all electrodes at the same instant and
reduces each channel's one period of samples to two numbers, an in-phase value I and a
quadrature value Q, with no sine or cosine table and no multiplier per sample. Only
those two 32-bit words per channel per frequency leave the FPGA. The host forms the
impedance from the ratio of a channel's (I, Q) to the (I, Q) of the reference voltage.

The RTL here covers the digital part of a 4-electrode prototype:

- a frequency controller that picks the sample rate for each test frequency;
- a serial loader for an AD9850 DDS sine generator;
- a broadcast SPI master for a bank of MCP3008 10-bit ADCs;
- the quarter-period integrators;
- a 10-word staging buffer;
- the sequencer that acquires two periods per frequency;
- an I2C master for the MCP40D17 rheostats that set the analog gains.

The analog front end, the ADC, DDS and rheostat chips, and the USB bridge to the host are
outside this core. Their pins appear as ports, and the testbenches contain behavioural
models of them.

## Signal chain

```
 host ──fcw m──► fcon ──(N_p, k, 4m, L)──► sys_monitor ──► dds_loader ──W_CLK/FQ_UD/D7──► AD9850
                                               │                                          │ sine
                                               │ run, k                              analog front end
                                               ▼                                          │ REF + 4 WE
                                         adc_spi_bank ◄──MISO×5── 5 × MCP3008 ◄───────────┘
                                               │ 5 samples every k clocks
                                               ▼
                                            iq_bank ──5 × (I,Q) per period──► iq_mem ──► host reads 10 words
 host ──N_in, N_out,1..4──► i2c_rheo ──5 separate I2C buses──► MCP40D17 (R_in, R_out,1..4)
```

Channel 0 is always the reference voltage V_ref driven onto the cell. Channels 1 to 4 are
the four working electrodes (WE). Each WE current passes through an inverting
transimpedance stage with gain −R_out,j, so the ADC sees a voltage. All five signals sit
on a mid-scale offset. The core subtracts the ADC mid-code 512 before integrating. A
constant would cancel anyway, but removing it keeps the sums small.

## From one period to an I/Q pair

Take one period T of a signal x(t) = C + A·sin(ωt + φ). Call the integrals over its four
quarters S0, S1, S2 and S3. Then:

```
 I = S0 + S1 − ½(S0+S1+S2+S3) = (S0 + S1 − S2 − S3) / 2  =  (2A/ω)·cos φ
 Q = S1 + S2 − ½(S0+S1+S2+S3) = (S1 + S2 − S0 − S3) / 2  = −(2A/ω)·sin φ
```

- **I** is the first half-period minus half of the whole period.
- **Q** is the same thing, started a quarter-period later.
- The offset C cancels in both.
- I − jQ = (2A/ω)·e^{jφ} is a phasor of the signal.

For one electrode, the reference phasor is X_ref. The channel phasor, negated to undo the
inverting amplifier, is X_ch. The impedance is then

```
 |Z| = R_out · |X_ref| / |X_ch|,      ∠Z = ∠X_ref − ∠X_ch
```

The scale factor 2/ω is the same for every channel, so it cancels. This is why I and Q
need no absolute calibration. With samples in place of integrals, the core outputs I and Q
multiplied by the sample rate: each output is a plain sum of samples, halved. For a sine
of amplitude A codes over N samples per period, |I − jQ| ≈ A·N/π.

The quarter sums are each computed once and shared between I and Q. So the datapath per
channel is four adders into four accumulators, plus the two combinations at the end of
the period.

## Adaptive sampling: choosing N_p and k

The quarter sums are only exact if each quarter holds the same whole signal time. So the
sample rate is adapted to the test frequency f_i instead of staying fixed. The steps are:

1. **Samples per period.** With the ADC ceiling F_S = 200 ksps, take the largest multiple
   of 4 samples per period that the ADC can deliver:

   ```
   N_p = 4 · floor(F_S / (4·f_i)),      f_s' = N_p · f_i
   ```

   The rule is often written with two cases: floor(F_S/f_i) when that is a multiple of 4,
   otherwise 4·floor(F_S/(4 f_i)). Both cases give the same number, which is what the
   hardware computes.

2. **Clock divider.** The ADC is triggered every k fabric clocks (F_CLK = 50 MHz), so the
   rate must be F_CLK/k:

   ```
   k = round(F_CLK / f_s'),      f̂_s = F_CLK / k      (the effective rate)
   ```

3. **Tuning-word arithmetic.** The test frequency arrives as the DDS tuning word m, with
   f_i = m·F_DDS/2^M (F_DDS = 100 MHz, M = 32). Two constants avoid real arithmetic:

   ```
   C_FS  = round(F_S ·2^M/F_DDS) = 8 589 935
   C_CLK = round(F_CLK·2^M/F_DDS) = 2^31
   N_p   = 4·floor(C_FS / 4m)
   k     = round(C_CLK / (N_p·m))
   ```

   The frequency controller (`fcon`) does these divisions, plus the one in the next
   section, one after another on a shared 64-step restoring divider (`udiv_seq`). A new
   configuration is ready about 200 clocks after a request.

4. **Out-of-range frequencies.** Above F_S/4, the quotient C_FS/4m is zero. The controller
   then raises `too_fast` and clamps N_p to 4. The resulting k samples faster than the ADC
   can convert, and the SPI bank reports that as `overrun`.

Examples at the default clocks:

| f_i | m | N_p | k | f̂_s |
|---|---|---|---|---|
| 0.05 Hz | 2 | 4 294 964 | 250 | 200 ksps |
| 1 kHz | 42 949 | 200 | 250 | 200 ksps |
| 10 kHz | 429 496 | 20 | 250 | 200 ksps |
| 50 kHz | 2 147 483 | 4 | 250 | 200 ksps |
| 80 kHz | 3 435 973 | 4 (too_fast) | 156 | 320 ksps, beyond the ADC |

Over a sweep from 0.05 Hz to 50 kHz, k stays between 250 and 437.

## Fractional quarter boundaries

Rounding k means the effective rate f̂_s is no longer exactly N_p·f_i. One period then
covers f̂_s/f_i samples, which is not an integer. For example, at 1 kHz it covers
200.003 samples. If the quarters were cut at whole samples, that error would leak a
fraction of the large in-phase sum into the quadrature one.

To avoid this, the integrators place each quarter boundary at its exact position in time,
and split the sample that the boundary falls in between the two quarters.

**The unit.** Positions are counted in units of 1/(4m) of a sample:

- One sample spans `4m` units.
- One quarter-period spans L units, where

  ```
  L = 2^M·f̂_s / F_DDS = C_CLK / k       (rounded to an integer)
  ```

  This follows because a period lasts f̂_s/f_i = C_CLK/(k·m) samples, so a quarter lasts
  C_CLK/(4·k·m) samples, which is C_CLK/k units.
- Quarter boundary j lies j·L units from the start of the period.
- Inside the sample it cuts, boundary j lies r_j = j·L mod 4m units from that sample's
  start.

**The split.** The sample X that boundary j cuts contributes:

- r_j/(4m) of its value to the quarter that is ending;
- (4m − r_j)/(4m) of its value to the quarter that is starting.

All other samples count fully in the quarter that contains them.

**Small example (4m = 12, L = 67).** A quarter is 5 7/12 samples long:

| boundary | position (units) | sample cut | split (ending : starting) |
|---|---|---|---|
| 1 | 67 = 5·12 + 7 | 5 | 7/12 : 5/12 |
| 2 | 134 = 11·12 + 2 | 11 | 2/12 : 10/12 |
| 3 | 201 = 16·12 + 9 | 16 | 9/12 : 3/12 |
| 4 (end) | 268 = 22·12 + 4 | 22 | 4/12 to S3 : 8/12 to S0 of the next period |

So consecutive periods share a sample, and the periods run back to back with no gap.

**In hardware (`iq_bank`).** A single counter `togo` holds the number of units left until
the next boundary. It is shared by all channels, because they are sampled together. For
each sample:

- If togo ≥ 4m, every channel adds X·4m to its current quarter, and togo drops by 4m.
- Otherwise, every channel adds X·togo to the current quarter and X·(4m − togo) to the
  next. The quarter index advances, and togo is reloaded with L − (4m − togo).

Because every term is multiplied by 4m, the sums stay exact integers. There is no
rounding inside a period. The accumulators are 52 bits wide. At k = 250, a quarter sum is
at most 512·L ≈ 2^32, so this width leaves room for any k down to 1.

**Closing a period.** When quarter 3 closes, both combinations are copied into a snapshot
and the accumulators restart for the next period:

- S0+S1−S2−S3 for I;
- S1+S2−S0−S3 for Q.

A single sequential divider then scales each of the 2·NCH snapshots by 1/(2·4m), rounded
to the nearest integer and with the sign restored. The results are the 32-bit signed
I·f̂_s and Q·f̂_s. This takes about 2·NCH·54 ≈ 550 clocks. The shortest period at
default rates is 4 samples × 250 clocks = 1000 clocks, so the divider always finishes in
time. If a period ends while the previous one is still being divided, it is dropped and
the sticky `lost` flag is set.

**What this departs from.** The published form of the boundary correction writes each
quarter as a sum over whole samples, minus r_j/(4m) of its first sample, minus
(4m − r_{j+1})/(4m) of its last. That gives the same weights as above. The integer
scaling by 4m, the single shared `togo` counter, and the deferred division are this
implementation's way of computing it. The rounding of L to an integer is also this
design's choice. Its error is under 1/(4m) sample per quarter, which is below 10^-6
sample at 1 kHz.

## Acquiring one frequency (`sys_monitor`)

One host request measures one frequency:

1. The host puts the tuning word on `host_fcw` and pulses `host_acq_req`.
2. `fcon` computes N_p, k, 4m and L. The sequencer latches them; they are visible on
   `cfg_n_per`, `cfg_k` and `cfg_too_fast`.
3. `dds_loader` shifts the tuning word into the AD9850.
4. When the load is done, the integrators are cleared, and sampling starts every k clocks.
5. Each completed period writes its five I/Q pairs into `iq_mem`, all ten words in the
   same cycle. The first period may carry the DDS switching transient. The second
   period's pairs overwrite it.
6. After the second period's write, sampling stops and `acq_done` goes high. It stays high
   until the next request, and `acq_periods` counts the periods. The host then reads words
   0..9 through `host_rd_addr` / `host_rd_data`. The data is registered, with one cycle of
   latency.
   - Word 2c is I of channel c; word 2c+1 is Q of channel c.
   - Channel 0 is the reference.

One frequency therefore takes about two signal periods, plus roughly 4 µs to configure,
plus about 7 µs for the DDS load. A few samples are still converted after the second
period ends, while its results are being scaled. They are ignored.

## ADC bank (`adc_spi_bank`)

The ADCs share SCLK, CS_n and MOSI. Each ADC returns data on its own MISO line. One
channel address is broadcast to all of them. On the board, input c of ADC j is wired to
electrode (j + c) mod 5. So address 0 samples the reference and all four working
electrodes at the same instant: this is the parallel mode. Other addresses rotate which
ADC sees which electrode.

The frame timing:

- A frame is 17 SCLK cycles, with each SCLK level lasting 7 fabric clocks: 3.57 MHz SCLK,
  about 4.8 µs per frame.
- MOSI sends the start bit, the single-ended bit and 3 address bits.
- The 10 data bits are captured on SCLK rising edges 8 to 17.
- A sample tick that arrives while a frame is still running is dropped and sets `overrun`.

At k = 250 (5 µs) the frame fits. This is the reason for the 200 ksps ceiling.

## DDS loader and rheostats

**`dds_loader`** uses the AD9850's serial mode:

- After reset, one W_CLK pulse and one FQ_UD pulse switch the chip into serial entry.
- Each load then shifts 40 bits, LSB first: the 32-bit tuning word followed by a zero
  control/phase byte.
- A final FQ_UD pulse makes the new frequency take effect.

**`i2c_rheo`** writes the 7-bit wiper code N of each MCP40D17, where
R = R_min + R_max·N/127:

- R_in sets the drive amplitude; R_out,1..4 set the transimpedance gains.
- Each write is START, 0x5C (address 0101110 and write), 0x00, {0, N}, STOP.
- All parts have the same fixed address, so each part is on its own bus. The five writes
  run one after another at 100 kHz.
- A missing ACK sets that device's bit in `rheo_nack`.

## Parameters

| Name | Default | Where | Meaning |
|---|---|---|---|
| NCH | 5 | `hermeis_pkg` | channels: reference + 4 working electrodes |
| ADC_W | 10 | `hermeis_pkg` | ADC resolution |
| ACC_W | 32 | `hermeis_pkg` | signed I/Q word width |
| M_BITS | 32 | `hermeis_pkg` | DDS tuning-word width |
| NCYC | 2 | `hermeis_pkg` | periods acquired per frequency |
| FCLK_HZ, FDDS_HZ, FS_HZ | 50 M, 100 M, 200 k | `hermeis_pkg` | fabric clock, DDS clock, ADC ceiling |
| N_W, K_W, U_W | 32, 16, 40 | `hermeis_pkg` | widths of N_p, k and the 4m / L unit words |
| SUM_W | 52 | `iq_bank` | quarter accumulator width (sums are scaled by 4m) |
| SCLK_HALF | 7 | `hermeis_top` | fabric clocks per SPI SCLK level |
| WCLK_HALF | 4 | `hermeis_top` | fabric clocks per DDS W_CLK / FQ_UD level |
| I2C_QTR | 125 | `hermeis_top` | fabric clocks per quarter I2C bit (100 kHz) |

The RTL is written for any NCH. The AFE has room for 8 electrodes. To use more than 4,
change `NCH` in the package and connect more ADCs.

## Where this design departs from, or fills in, the published description

**Filled in by this design:**

- The tuning-word width M = 32. The published text leaves M symbolic, and quotes the
  lowest frequency as F_DDS/2^31 = 0.047 Hz. With M = 32, the smallest usable m is 2,
  which gives the same frequency.
- The "32×10" staging buffer is read as 10 words of 32 bits, one I and one Q per channel.
- The published effective-rate formula reads f̂_s = k·f_clk ± f_ε. Here it is taken as
  F_CLK/k, the only reading consistent with the divider.
- The internal quarter sums are wider than 32 bits because they are scaled by 4m. Only
  the output words are 32-bit signed.
- All handshakes, the word order, reset behaviour, the SPI and DDS framing details, and
  the use of one I2C bus per rheostat.

**Not included:**

- The USB host bridge. Its register and read port are plain ports of `hermeis_top`.
- The host-side impedance computation, including the empirical calibration factor used on
  the measured data.
- The pseudo-parallel mode, which multiplexes channel addresses on one ADC. It is only
  outlined as future work. The broadcast address port does allow selecting any ADC input.

**Timing of a full sweep.** Two periods at each of 100 log-spaced points from 0.05 Hz to
50 kHz add up to 307 s (about 5.1 minutes) of signal time alone. This is longer than the
3 min 40 s reported for such a sweep. The core adds only tens of
microseconds per point: set-up, DDS load and the scaling of the last period.

## Files

| File | Content |
|---|---|
| `rtl/hermeis_pkg.sv` | constants, tuning-word conversion, configuration struct |
| `rtl/udiv_seq.sv` | sequential restoring divider (helper) |
| `rtl/fcon.sv` | adaptive sampling: N_p, k, 4m, L |
| `rtl/dds_loader.sv` | AD9850 serial loader |
| `rtl/adc_spi_bank.sv` | sample timer and broadcast MCP3008 SPI master |
| `rtl/iq_bank.sv` | quarter-period integrators with fractional boundaries |
| `rtl/iq_mem.sv` | 2·NCH × 32-bit staging buffer |
| `rtl/sys_monitor.sv` | per-frequency acquisition sequencer |
| `rtl/i2c_rheo.sv` | I2C master for the rheostats |
| `rtl/hermeis_top.sv` | top level |
| `tb/mcp3008_model.sv`, `tb/ad9850_model.sv`, `tb/i2c_target_model.sv` | behavioural models of the external chips |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_hermeis_top.sv` | end-to-end test at default parameters |
| `tb/tb_eis_protocols.sv` | three electrode test protocols through the whole core |
| `tb/tb_spectral_scan.sv` | 100-point logarithmic sweep, the points from 10 Hz to 50 kHz |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops. Each has a watchdog
that counts a failure if the test hangs. With Verilator 5:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/hermeis_pkg.sv \
          tb/tb_hermeis_top.sv --top-module tb_hermeis_top
./obj_dir/Vtb_hermeis_top
```

Replace the testbench name to run another one. The package file must come first.

What the testbenches check:

- **`tb_iq_bank`** compares the integrators bit-exactly against a reference. The reference
  computes each quarter from the overlap of sample intervals with quarter intervals. It
  covers small unit grids (for example 4m = 12, L = 67) and the real 1 kHz and 10 kHz
  grids, and checks the magnitude and phase of sines.
- **`tb_fcon`** checks N_p, k and L against real-number arithmetic. It also checks the
  latency.
- **`tb_hermeis_top`** models the DDS, five ADCs and Randles-type electrode loads, and
  measures impedance from the words read back at several frequencies. It covers:
  - 100 Hz to 50 kHz;
  - a first period corrupted by a transient;
  - a rotated broadcast address;
  - a frequency above F_S/4 (too_fast and overrun);
  - rheostat writes with and without an answering device.

  It counts each of these events and fails if any of them never happens.
- **`tb_eis_protocols`** runs three sets of four electrodes at 10 Hz to 50 kHz (and 1 Hz
  for the first set), and compares |Z| and ∠Z with the model:
  - identical cells;
  - double-layer capacitance stepped through 68, 150, 330 and 560 nF;
  - charge-transfer resistance stepped through 100, 53.6, 12 and 3.9 kΩ.

  The tolerances are 5 % and 3°, widened to 8 % and 5° at 50 kHz, where a period has only
  four samples.

- **`tb_spectral_scan`** steps through the 100-point logarithmic grid from 0.05 Hz to
  50 kHz, one request per point. It measures the 62 points from 10 Hz up; the 38 lower
  points would need about 305 s of simulated signal. For each point it checks that the
  acquisition lasts two signal periods plus at most 30 µs, and it checks the four
  impedances.

The assertions in `fcon` and `sys_monitor` are disabled while `rst_n` is low. Lint tools
may therefore report `rst_n` as used both synchronously and asynchronously. This is
intended.
