# Spectral (wavelet) trigger for radio detection of cosmic-ray air showers

An air shower produces a short radio pulse, about 100 ns long. Most of its power
lies between 30 and 80 MHz, the pass band of the antenna and its analog filter.
A noise pulse or a man-made disturbance often spreads its power over the whole
band the ADC samples, from a few MHz up to the 100 MHz Nyquist limit. This
design decides on line, on every sample, whether the spectrum of the last
stretch of signal is "typical" or "untypical". When it is untypical it freezes
a record of the event's spectrum for a host processor to read.

The signal enters as 14-bit samples at 200 MSa/s, one per clock. The design
works in the frequency domain:

1. Four IIR notch filters remove narrow-band transmitters (27.12, 40.9, 55.2
   and 70.7 MHz).
2. A 32-point FFT of the newest 32 samples is computed **every clock cycle**,
   fully in parallel. Its bins are 6.25 MHz apart, and bins k = 1..16 cover
   6.25 to 100 MHz.
3. For each bin a wavelet power |W_k|^2 is formed. The reference wavelets are
   narrow Morlet wavelets with scale parameter alpha = 0.0001. Each draws
   almost all its power from one bin, so |W_k|^2 = C_k |X_k|^2 with C_k = 1,
   except C_16 = 2 for the 100 MHz wavelet.
4. Each bin's power is summed over the last 16 cycles (a boxcar).
5. The *spectral distortion estimator* is formed:
   `SDE = (power in the outer bands) - (power in the central band)`.
   When SDE >= 0, i.e. its sign bit is 0, the event is flagged.
6. The flag is delayed by 512 cycles. Then a 1024-word ring buffer of the
   averaged bin powers (k = 1..15) stops recording. It then holds the spectral
   history from about 510 cycles before the trigger to about 510 after it.

A second, simpler trigger, an amplitude threshold right after the notch
filters, catches filter "sparks" (oscillations of the IIR feedback). A select
input chooses which of the two triggers freezes the buffer.

## Block diagram and latencies

```
adc --> notch_cascade --+--> spark_comparator --------------------+
        (4 x notch_section)  |                                      |  trig_src
                        +--> sample_window --> fft32 --> power_calc --> boxcar x16 --> sde_trigger --+--> capture_ctrl
                              (32 taps)      (7 stages)  (2)          (1)            (3)                (trig_delay 512,
                                                                                                           event_dpram 1024 words)
```

| block | file | latency (cycles) | throughput |
|---|---|---|---|
| notch section | `rtl/notch_section.sv` | 1 | 1 sample/clk |
| notch cascade | `rtl/notch_cascade.sv` | 4 | 1 sample/clk |
| sample window | `rtl/sample_window.sv` | 1 | 1 window/clk |
| FFT | `rtl/fft32.sv` | 7 | 1 FFT/clk |
| power | `rtl/power_calc.sv` | 2 | 16 bins/clk |
| boxcar | `rtl/boxcar.sv` | 1 | |
| SDE + trigger | `rtl/sde_trigger.sv` | 3 | |
| capture | `rtl/capture_ctrl.sv`, `rtl/trig_delay.sv`, `rtl/event_dpram.sv` | freeze 513 after acceptance | |
| top | `rtl/wavelet_trigger_top.sv` | | |

Shared widths and constants live in `rtl/wt_pkg.sv`.

## The 32-point FFT (`fft32`)

This is the core of the design and the part worth reading closely.

**Why parallel.** A streaming FFT core delivers its bins one after another.
The trigger needs all bins of every window at once, every cycle. So the FFT is
built as a flow graph: every butterfly of every stage is its own adder or
multiplier, and there is a register after each stage.

**Decimation in frequency.** The first stage folds the 32 real samples:

```
A_n      = x_n + x_{n+16}     (n = 0..15)  -> even bins X0, X2, ..., X16
A_{n+16} = x_n - x_{n+16}                  -> odd bins  X1, X3, ..., X15
```

The even bins are a 16-point FFT of A0..A15, in stages B, C, D, E, F. Stage D
holds the only real products of this half: alpha = cos(pi/8), beta =
sin(pi/8) and gamma = cos(pi/4). Stage E adds gamma products on lanes 5 and 7.
The odd bins need the twiddle factors W32^n. Only the real input is used, and
only X0..X16 are formed, because X_{32-k} is the complex conjugate of X_k. So
every multiplication is real; there is no complex multiplier anywhere.

**The saved stage.** A plain radix-2 version needs 8 stages. In the odd half,
one stage would consist only of multiplications by gamma = 1/sqrt(2). The
design removes that stage, as follows:

* In stage B, A16..A19 and A24..A27 are multiplied by lambda = 1/gamma = sqrt(2).
  The gamma stage that would follow then becomes a plain delay and is dropped.
* To restore the scale, the twiddle constants used later are pre-multiplied by
  gamma: alpha' = gamma*alpha, beta' = gamma*beta, xi' = gamma*cos(pi/16),
  eta' = gamma*sin(pi/16), sigma' = gamma*cos(3pi/16), rho' = gamma*sin(3pi/16).
* Lanes 16, 20, 24 and 28 get an explicit gamma product (E = gamma*D).

The result is 7 register stages: A, B, C, D, E, F and the output column.
Every butterfly equation in `fft32.sv` is copied from the published flow
graph, box by box. The full list is in the code, stage by stage; e.g.
`E17 = xi' C17 - eta' C25`, `Re X1 = F16 + F17`, `Im X1 = -(F24 + F25)`. The
equations were checked numerically against a DFT before the RTL was written.
In the flow graph the odd-half products (`E17` etc.) span the D and E columns.
Here the two products are registered in stage D and combined in stage E, so
both halves are equally deep.

**Widths.** Each stage grows by one bit: 15 bits after A, and so on up to 20
bits after F. The outputs stay 20 bits. This is enough: for a 14-bit input,
|Re X_k| and |Im X_k| are at most 32 * 8192 = 2^18. Coefficients are 18-bit
signed with 16 fractional bits, and each product is rounded to an integer
(this design's choice). The testbench shows errors of a few LSB against exact
arithmetic, and limits them to 8 LSB.

**Sign convention.** The output labels of the flow graph are followed. For
k = 4, 6 and 8 they give the imaginary part with the opposite sign to
X_k = sum x_n exp(-2 pi i k n/32). That is, these three bins come out as complex
conjugates. The powers are not affected. If you need true values, negate
`im[4]`, `im[6]` and `im[8]`.

## Power, boxcar and the SDE

`power_calc` cuts each 20-bit component to 16 bits by dropping the 4 LSBs.
This keeps each squarer to two DSP multipliers. It then forms
Re^2 + Im^2 and doubles it for k = 16. Dropping 4 bits costs some accuracy for
small signals: a power below about 256 counts^2 per component reads as 0.

`boxcar` keeps a register chain per bin and updates a running sum (new
minus oldest). The sum is not divided. The chain length is the top parameter
`AVG`, 16 by default. With 32, the sums and `sde` are one bit wider.
`sde_trigger` weights each bin +1 (outer band) or -1 (central band) and adds
them in a two-level tree.

**Band edges.** `k_low` and `k_high` are run-time inputs. Bin k is in the
outer band when `k < k_low` or `k >= k_high`. The four band choices studied
for this trigger are:

| variant | lower outer band | upper outer band | k_low | k_high |
|---|---|---|---|---|
| A | 6.25-12.5 MHz | 93.75-100 MHz | 3 | 15 |
| B | 6.25-18.75 MHz | 87.5-100 MHz | 4 | 14 |
| C | 6.25-25 MHz | 81.25-100 MHz | 5 | 13 |
| D | 6.25-31.25 MHz | 81.25-100 MHz | 6 | 13 |

The written formula for SDE counts the bin at `k_high` in both the outer and
the central sum. The convention here matches the band limits of the table.

**A consequence of the sign rule.** SDE >= 0 fires the trigger, so an input of
exact zeros (SDE = 0) fires it too. Real ADC data always carries noise, and
the central band then dominates. A testbench must not feed silence while the
capture is armed.

## Capture of the event profile

`capture_ctrl` writes one profile word per clock into a 1024-word RAM
(`event_dpram`) used as a ring. A word is 15 x 33 bits: the boxcar averages
(sum / `AVG`) of bins 1..15. Bin k sits in bits `[(k-1)*33 +: 33]`.

The capture has three states:

* **ARMED**: recording, waiting for a trigger.
* **PENDING**: still recording, while the accepted trigger travels through
  `trig_delay`. That block is a 512-entry RAM used as a circular shift
  register.
* **FROZEN**: writing stops when the delayed trigger comes out, 513 cycles
  after it was accepted.

The host reads the record through the second port (`rd_addr`, data one cycle
later). It starts at `start_addr`, the oldest word. The word written in the
trigger cycle sits at offset 510. The host then pulses `arm` to record again.

This design adds two rules of its own:

* Only one trigger is in flight at a time. Triggers during PENDING or FROZEN
  are ignored. An assertion checks this.
* After arming, a trigger is accepted only once 512 new words have been
  written, so the whole record is newer than the arm.

The profile word leaves the boxcars 3 cycles before the trigger it produces.

## Notch filters and the spark comparator

Each `notch_section` evaluates

`y_i = x_i - 2cos(w) x_{i-1} + x_{i-2} + 2r cos(w) y_{i-1} - r^2 y_{i-2}`

in one cycle, with w = 2 pi f_notch / 200 MHz and r = 0.99. The coefficients
are computed at elaboration from the real-valued parameters `F_NOTCH_MHZ`,
`FS_MHZ` and `R`. They have 17 fractional bits.

The feedback state carries 8 fractional bits and 4 bits of headroom, because a
ringing filter can reach several times the input amplitude. The state
saturates rather than wraps. The output is rounded and saturated to 14 bits.
Against the same recursion in exact arithmetic, one section stays within
0.6 LSB and the cascade within 2 LSB. The cascade gain away from the notches
is about 1.04.

`spark_comparator` flags |y| > `spark_thr`, one cycle later.

## Top-level interface (`wavelet_trigger_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | sample clock; synchronous active-low reset |
| `adc` | in | 14 signed | ADC sample |
| `k_low`, `k_high` | in | 5 | SDE band edges (see table) |
| `spark_thr` | in | 13 | amplitude threshold of the spark trigger |
| `trig_src` | in | `trig_src_t` | `TRIG_WAVELET` (0) or `TRIG_SPARK` (1) |
| `arm` | in | 1 | one-cycle pulse: resume recording after a freeze |
| `rd_addr` | in | 10 | host read address |
| `rd_data[1:15]` | out | 15 x 33 | averaged power of bins 1..15 at `rd_addr` (1 cycle) |
| `frozen` | out | 1 | a record is held |
| `start_addr` | out | 10 | address of the oldest word of the record |
| `trig_count` | out | 16 | accepted triggers since reset |
| `sde` | out | 43 signed (`38 + log2(AVG)`) | current SDE |
| `wavelet_trig`, `spark` | out | 1 | the two raw trigger flags |

The host side is not part of the RTL: a soft processor that reads the record
and sends it over a serial port, and the ADC front end. Its signals are the
ports above.

## What follows the published design and what does not

Taken from the published description:

* the FFT flow graph (every equation), its 7 stages and its bus widths
  (14 -> 20 bits);
* the 16-bit squaring bus;
* single-bin wavelet powers with weight 2 at 100 MHz;
* the 16-sample boxcar;
* the SDE formula and its sign-bit trigger;
* the 512-cycle RAM delay and the 1024-word dual-port record of bins 1..15;
* the notch equation, its four frequencies and r = 0.99;
* the 200 MHz sample rate and the 14-bit ADC.

Choices of this design, because the description is silent:

* all reset behaviour;
* the coefficient formats of the FFT and the notch filters, the notch state
  width and the output saturation;
* which 4 bits are dropped for the 16-bit bus;
* the widths of the power, boxcar and SDE words; the boxcar is not divided;
* the SDE band convention at `k_high` and the band edges as run-time ports;
* the pipelining of the power and SDE stages;
* the sample order in the window (x31 newest);
* the capture state machine: one trigger in flight, 512-word refill after
  arming, `start_addr`;
* the word layout of the record;
* the boxcar length as the top parameter `AVG` (default 16). Set it to 32
  for the longer averaging the trigger was also evaluated with. It must be a
  power of two, because the stored average is a shift;
* the spark threshold as a run-time port, and the trigger-source select.

Not built:

* the alternative energy estimate that sums products with every bin of the
  full wavelet spectra ("SEL = 1");
* the 16-point FFT variant;
* wavelets with other scale factors (their weights C_k are not given);
* the host processor, serial link, ADC, and the test-vector ROM of the
  laboratory setup.

The trigger is meant to run at 200 MHz on a mid-range FPGA. No timing
analysis was done on this RTL. The notch recursion is a single-cycle
multiply-add loop, which is the path most likely to limit the clock rate.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With plain Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/wt_pkg.sv tb/tb_fft32.sv --top-module tb_fft32 && obj_dir/Vtb_fft32
```

Replace `fft32` with any block name: `sample_window`, `notch_section`,
`notch_cascade`, `spark_comparator`, `power_calc`, `boxcar`, `sde_trigger`,
`trig_delay`, `event_dpram`, `capture_ctrl` or `wavelet_trigger_top`.

What the testbenches compare against:

* `tb_fft32`: a DFT evaluated in real arithmetic, for random, full-scale and
  pure-cosine windows; latency 7.
* `tb_notch_*`: the recursion in real arithmetic, notch depth, pass-band gain
  and latency.
* `tb_power_calc`, `tb_boxcar`, `tb_sde_trigger`: integer models.
* `tb_trig_delay`, `tb_event_dpram`, `tb_capture_ctrl`: exact cycle
  behaviour, record contents and the trigger offset.

`tb_wavelet_trigger_top` runs the whole chain at its default parameters for
about 12,000 cycles, which takes a few seconds. Its stimulus is:

* a 50 MHz "shower" tone with noise;
* a strong 27.12 MHz transmitter that is on throughout;
* bursts at 93.75 MHz and at 100 MHz;
* a single spike.

Every cycle it compares the DUT's SDE with an independent reference: a
real-arithmetic DFT, bin powers, boxcar sums and the SDE, computed from the
notch output. It also checks the following mechanisms, and fails if any never
happens:

* the transmitter alone would have fired the trigger on raw samples, but does
  not after the notches;
* both bursts fire the wavelet trigger;
* the record freezes exactly 513 cycles after acceptance;
* a second trigger during PENDING is ignored;
* the record reads back correctly;
* rearming works;
* the weight of 2 for bin 16 is applied;
* the spike fires the spark trigger.

`tb_top_band_variants` runs the band choices A to D of the table above on the
complete design. It uses Gaussian-envelope bursts centred on bins 2, 3, 4, 5,
13, 14 and 15. A burst must fire the trigger exactly when its bin lies in
that variant's outer band. A 50.62 MHz pulse, which is shower-like, must fire
in no variant. A second instance with `AVG = 32` gets the same samples and
must give the same outcomes. Its stored averages, times 32, are also checked
against two consecutive 16-sample sums of the first instance.
