# Frequency counter for tracking a self-sustaining nanomechanical oscillator

A nanomechanical resonator used as a sensor shows an event (added mass, a
temperature or force change) as a small shift of its resonance frequency. In
this setup the resonator is kept oscillating by a *self-sustaining
oscillator* (SSO) loop, and its frequency is read by a **frequency counter**
instead of a phase-locked loop. The counter here is a continuous,
interpolating reciprocal counter with two changes that make it a good
frequency-shift monitor:

1. **It filters time, not frequency.** A reciprocal counter measures the
   duration `T` of each input period and reports `f = 1/T`. Timing noise on
   the edges is mostly high-frequency (white phase noise from the readout).
   Because `1/T` is nonlinear, that noise mixes down into low-frequency
   frequency errors (intermodulation), and no filter after the conversion can
   remove them. So all filtering is done on the measured durations, and the
   reciprocal is taken last.
2. **It outputs samples at a fixed rate.** A reciprocal counter gives one
   result per input period, so its sample rate moves with the input
   frequency, and so does the response of any filter that follows it. Here
   each duration is held on the counter's clock grid (zero-order hold) and
   decimated by a CIC filter. This gives one sample every `R` clock cycles,
   whatever the input frequency.

The RTL in `rtl/` implements the counter and the digital pulse path of the
oscillator loop. It is written in SystemVerilog and is synthesizable, except
for the sub-clock time interpolator, which is a behavioural model.

## Signal chain

```
                 k                                    lpf_coef, lpf_bypass       k
                 |                                              |                |
 fc_in --> freq_divider --> tdc_interpolator --> main_counter --> zoh --> cic_decimator --> lowpass_filter --> time_to_freq --> f
 (async)   (÷k, input-      (edge position       (time stamps,     (hold     (2nd order,       (1st-order IIR,     (f = k·f_CLK·128 / P)
            clocked)         within T_CLK)        intervals)        on clk)   ÷R, delay N)      sets bandwidth)
                                                     |                          |
                                                 raw_ivl                     dec_ivl

 comp_in --> pulse_width_gen (T_w) --> pulse_delay (T_d) --> drive_pulse   (to the attenuator and resonator)
```

| module | role |
|---|---|
| `freq_divider` | Prescaler. It gives one rising edge per `k` input periods, which sets the gate time. `k = 1` passes the input through. |
| `tdc_interpolator` | *Behavioural model.* It gives the position of an input edge inside the clock period in 1/128 steps (101.6 ps at 76.92 MHz). |
| `main_counter` | A free-running clock counter that is never cleared. It forms time stamps `t = cycles·128 − fine` and outputs `t_n − t_{n−1}`. |
| `zoh` | Repeats the latest interval on every clock cycle. |
| `cic_decimator` | Two integrators, a ↓R stage and two comb sections with delay N. Its output is normalised to the mean interval. |
| `lowpass_filter` | A first-order Butterworth (bilinear) low-pass with a run-time coefficient and a bypass. |
| `time_to_freq` | A sequential restoring divider that computes `f = k·F_CLK·2^7 / P`. |
| `freq_counter` | Connects the counter chain above. |
| `pulse_width_gen`, `pulse_delay` | Build the SSO drive pulse: width `T_w`, delayed by `T_d`. |
| `sso_fc_top` | Top level: the counter plus the pulse path. |
| `fc_pkg` | Shared constants: clock frequency, widths, the default filter coefficient. |

## Why filtering the durations works, and what the output means

Write the k-period durations the main counter reports as `P_n`. In a
classical counter `f_n = k / P_n`. Here the counter reports instead

    f = k / LPF( CIC( ZOH(P) ) )

The ZOH followed by the CIC is a time-weighted mean of `P` over the CIC
window. With R = 8192 and N = 2 that window is 2·R·N = 32768 clock cycles
(0.43 ms), or about 50 periods of a 119 kHz signal. The low-pass filter then
averages further, over about 0.8 ms for a 200 Hz cut-off. Only then is the
reciprocal taken. For a constant input frequency the result is exact. For a
noisy input, the edge jitter has been averaged out before the nonlinearity
acts. The tracking bandwidth is set by the low-pass coefficient. The gate
time `k` is not the tuning knob: `k = 1` with a narrower filter gives the
better trade-off between precision and speed. `k > 1` is supported, and
gate times up to 65535 periods fit the widths.

Because the CIC output is the *mean duration*, it has no units of frequency.
A step in frequency therefore shows up in `f` as a slightly non-linear
transition: the reciprocal of a filtered duration. The final value is
exact.

## Number formats and timing

Clock: one clock `clk` at `F_CLK_HZ` (76.92 MHz). All outputs are
synchronous to it. `fc_in` and `comp_in` are asynchronous.

| signal | format |
|---|---|
| `raw_ivl` (32 b) | k-period duration in units of T_CLK/128 (101.6 ps). At 119 kHz and k = 1 it is about 82 740. It is strobed by `raw_valid` at the input rate. |
| `dec_ivl` (48 b) | The same unit with 16 fraction bits. It is strobed by `dec_valid` once every R = 8192 cycles (9.39 kHz). |
| `f` (48 b) | Frequency in Hz with 16 fraction bits. It is strobed by `f_valid` every 8192 cycles and saturates to all ones. |
| `lpf_coef` (18 b) | b0·2^18, where b0 = K/(1+K) and K = tan(π·f_c/f_s). The value 16464 gives f_c = 200 Hz at f_s = 9389.6 Hz. It must stay below 2^17. |
| `k` (16 b) | Counted periods per interval. 0 is treated as 1. |
| `tw` (16 b), `td` (10 b) | Pulse width and delay, in clock cycles. |

Latencies:

- The interpolator reports an edge on the first clock edge after it.
- The interval appears one cycle after that.
- The ZOH adds one cycle.
- The CIC output arrives one cycle after every 8192nd clock cycle. The first
  2N−1 = 3 decimated samples are withheld while the window fills.
- The low-pass filter adds one cycle and loads its state from the first
  sample.
- The divider takes 83 cycles.
- A drive pulse starts `td + 4` clock edges after a comparator edge: two
  synchroniser stages, the pulse register, then `td + 1` cycles of delay.
  It lasts `tw` cycles.

All values are kept modulo 2^32. The coarse counter wraps every 0.44 s, but
intervals stay correct as long as one k-period interval is shorter than
that.

## The CIC decimator in detail

```
x(n) ─►(+)──┬──►(+)──┬──► ↓R ──┬──►(+)──┬──►(+)──► y(m)/(RN)^2
        ▲   │    ▲   │         │    ▲−  │    ▲−
        └z⁻¹┘    └z⁻¹┘         └z⁻ᴺ─┘   └z⁻ᴺ─┘
```

- **Word width.** The integrators are 32 + 2·log2(R·N) = 60 bits wide. They
  wrap freely, and two's-complement arithmetic makes the comb output exact
  anyway (Hogenauer).
- **Output scaling.** The decimated sample includes the input of the same
  cycle. Its DC gain is (R·N)^2 = 2^28. The output is shifted right by
  28 − 16 bits, so it is the mean input with 16 fraction bits. R·N must
  therefore be a power of two. An elaboration-time assertion enforces this.
- **Frequency response.** The response falls off gradually towards f_s/2,
  with no flat passband and no sharp edge. This is why the low-pass filter
  after it is needed and actually defines the bandwidth.

## Self-sustaining oscillator loop

In the full loop, the analog parts are outside this RTL. The resonator's
signal is amplified, band-pass filtered and squared by a comparator. Each
comparator edge fires a short pulse of width `T_w`. The pulse is delayed by
`T_d`, attenuated, and kicks the resonator, so the loop keeps it ringing at
resonance. The counter reads the band-pass output outside the loop.

In `sso_fc_top`:

- `comp_in` is the comparator output.
- `fc_in` is the squared band-pass output that the counter uses. In a
  simple build the same comparator serves both.
- `drive_pulse` goes to the attenuator.

`pulse_delay` is a circular buffer of 1024 one-bit entries. It delays any
pulse pattern exactly, covering up to 1.5 periods of a 119 kHz signal.

## What follows the publication and what is this design's own

Taken from the published design:

- the block order of the counter;
- continuous time stamping that is never reset;
- the ~100 ps interpolation;
- the ZOH + CIC resampling, with a second-order CIC, R = 2^13, comb delay
  N = 2, and f_CLK = 76.92 MHz (giving a 9.4 kHz output rate);
- a first-order 200 Hz low-pass applied before the time-to-frequency step;
- the divider-based gate time k;
- the SSO pulse path of width T_w and delay T_d.

Choices made here, where the publication gives no detail:

- all word widths and fixed-point formats;
- the time-stamp convention and outputting intervals rather than absolute
  stamps;
- the bilinear filter form, the run-time coefficient and the bypass;
- the divider algorithm;
- reset behaviour: asynchronous active-low everywhere, with the filter
  state loaded from its first sample;
- the rising-edge trigger, synchroniser and retrigger rule of the pulse
  generator;
- the interpolator's output convention.

Not included:

- **The interpolator circuit itself.** It is a delay-line or analog
  time-to-digital converter. Replace `tdc_interpolator` with one for the
  target device, keeping the `hit`/`fine` interface.
- **Automatic adjustment of T_w and T_d.** This is the control that sets
  the oscillation frequency. No control law is given, so `tw` and `td` are
  inputs.
- **The analog parts:** resonator, preamplifier, band-pass filter,
  comparator and attenuator.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- **Per-module tests.** They compare each module with an independent
  reference:
  - a direct triangular-kernel convolution for the CIC, at R = 4 and at the
    full R = 8192;
  - a double-precision recursion and the step-response time constant for
    the low-pass filter;
  - a double-precision quotient with the exact 83-cycle latency for the
    divider;
  - true edge times for the counter and the interpolator, including counter
    wrap;
  - cycle-exact pulse timing for the pulse path.
- **`tb_freq_counter`.** It runs the whole chain at R = 256. It checks raw
  intervals, decimated intervals and frequency against the source, for k = 1
  and k = 3, with and without the filter, and across a frequency step.
- **`tb_sso_fc_top`.** It runs the complete design at its default parameters
  on a 119 kHz input. It covers:
  - filtered output within ±1 Hz;
  - a 500 Hz step, with 63 % reached within 5–15 samples;
  - bypass within ±3 Hz;
  - k = 2;
  - more than 2000 drive pulses checked for delay and width.

  It simulates 19 ms in about a second.
- **`tb_workload_k_sweep`.** It runs the full-size counter through k = 1, 41,
  81, 121 and 161 with ±1 ns edge jitter. It checks that both raw and
  filtered means are within 1 Hz, and that the filtered output scatters less
  than the raw one. At k = 1 the scatter is about 0.09 Hz raw and 0.01 Hz
  filtered.

Nothing was verified against measured hardware. The published ten-second
measurements and its Allan-deviation results were not reproduced. Only
logic-level behaviour was checked.

## Simulating

The interpolator model uses `realtime`, so simulations need `--timing`.
Put the package first:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/fc_pkg.sv tb/tb_sso_fc_top.sv --top tb_sso_fc_top
./obj_dir/Vtb_sso_fc_top
```

Any other testbench runs the same way. Testbenches that drive asynchronous
signals use `timeprecision 1fs` and a 6500.26 ps half period, so the
simulated clock matches `F_CLK_HZ`.

If you change the clock, set `F_CLK_HZ` and recompute `lpf_coef`. For a
different decimation factor, keep R·N a power of two, and note that the
output rate and the filter coefficient both scale with R.
