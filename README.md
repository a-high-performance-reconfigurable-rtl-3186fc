# A time-domain reflectometer built from one differential FPGA I/O

A time-domain reflectometer (TDR) sends a short pulse down a line and records the
echoes. Each impedance change along the line sends part of the pulse back, and the
echo's delay says where the change is. A lab TDR needs a very fast pulse source and a
receiver that is both fast and precise. This design needs neither. It turns one
bidirectional differential I/O pin pair of an FPGA into the whole instrument, with no
parts outside the chip:

* **Transmitter.** The tristate output buffer on the negative pad has its data input
  tied to 1. Enabling it for about 1 ns launches a pulse into the line.
* **Receiver.** The pair's differential input buffer acts as a comparator. The line
  (negative pad) goes to its inverting input. A *jitter clock* goes to the
  non-inverting input: an internal clock that the positive-side output buffer drives
  onto the positive pad.
* **Converter.** The comparator is sampled at a fixed point on the rising edge of the
  jitter clock. The random jitter of that edge acts as Gaussian noise on the reference
  voltage. The chance that the comparator says 1 therefore varies smoothly with the
  line voltage. Counting the 1s over M repeated probings measures that chance, and so
  the voltage. This is *jitter-based analog-to-probability conversion* (JAPC).
* **Time base.** A PLL with dynamic phase shift moves the sampling clock in steps of
  tau_d = Ts/J against the transmit clock. This is equivalent-time sampling (ETS): J
  samples fill each real-time sampling period Ts.

The RTL here is the fabric logic of that instrument. The PLL, the delay lines and the
I/O buffer are FPGA primitives. They sit outside the top module, which exposes their
control signals as ports. Behavioural models of them are in `tb/`.

Default sizes are those of the prototype: Ts = 10 ns (100 MSPS real time), P = 10
real-time samples per probing, J = 560 phase positions (tau_d = 17.86 ps, 56 GSPS
equivalent), and M up to 100 000 probings per sample. The delay lines have 512 taps
spanning 1.1 ns.

## Signal chain and clocks

```
                    +--------- delay line (probe_tap) ----+
 sys_clk -----------+                                     AND --(armed)--> t_n --> T_N of I/O
   |                +------------------------ inverted ---+
   |
   +--> PLL, dynamic phase shift (psen/psincdec/psdone)
          |
          +--> delay line (fine_tap) ------------------------> rx_clk (samples D_O)
          |
          +--> 5 delay lines in series, all at coarse_tap ----> D_P of I/O (jitter clock)

 I/O: D_N = 1, T_P = 1;  D_O = (PAD_P > PAD_N)
```

**Probe pulse (`probe_pulse_gen`).** The pulse is the AND of a delayed copy of the
system clock and the inverted system clock. It goes high at the falling edge of
`sys_clk` and lasts for the delay line's delay. Tap 465 gives about 1 ns. A third AND
input, `armed`, is a register loaded at the rising edge. It lets the pulse through
only in the probing slot the sequencer chooses. Because `armed` changes only while
`~sys_clk` is 0, it cannot cut a pulse short, provided the delay is under Ts/2.

**Jitter clock and sampling clock (`autocal`).** Both clocks come from the
phase-shifted PLL output, so they move together during the ETS sweep. The sampling
instant must sit on the middle of the jitter clock's rising edge. At that point the
comparator gives 1 half the time, its offset and hysteresis are cancelled, and the
response is close to linear. Two delays set that point:

* The five chained lines on the jitter-clock path must share one tap value. This is
  the coarse control: one coarse step is five taps, about 10.7 ps.
* One line on the sampling-clock path is the fine control, one tap per step.

## One measurement (`ets_sequencer`)

A measurement fills a P x J array of counts:

1. **Probing.** One probe is launched, and the comparator is sampled at P
   consecutive rising edges of `rx_clk` (slots p = 0..P-1).
2. **Averaging.** Step 1 is repeated M times. For each p, the sequencer counts how
   many samples were 1. The count divided by M is the probability for sample p.
3. **Phase stepping.** The sampling clock is moved one step later through the PLL
   (`psen` with `psincdec` = 1, then wait for `psdone`). Steps 1 and 2 are then
   repeated, J times in all.

Count (p, j) belongs to the instant p*Ts + j*tau_d. The J counts with the same p
form SET p. The loop order matters. Each probing takes all P samples, so noise that
drifts slowly against P*Ts (100 ns) is the same in every SET of one phase position.
The noise reduction below relies on this.

Cycle by cycle, one phase position takes:

| part | cycles | what happens |
|---|---|---|
| warm-up probing | P | probes are sent but nothing is counted; fills the sample pipeline and lets the capture zone settle |
| counted probings | M*P | P counters count the 1s |
| drain | 4 | the last samples arrive |
| write-out | P | one count per cycle into the waveform buffer; the counters are cleared |
| phase step | 1 + 13 | `psen` pulse, then wait for `psdone` (the PLL needs 12 cycles) |

A whole measurement takes J * ((M+1)*P + P + 18) cycles. For the prototype
settings (M = 1000) that is 5 621 280 cycles, or 56.2 ms. After the last position
the sequencer issues one more phase step. J steps of Ts/J bring the sampling clock
back to where it started, so the next measurement begins at phase 0.

The probe is requested so that it leaves in real-time slot `cfg_slot` (use 1). The
pulse starts at the falling edge of that slot, Ts/2 after its start. The time after
launch of sample (p, j) is then

    tau(p, j) = (p - cfg_slot - 1/2) * Ts + j * Ts/J + (sampling-path delay)

With `cfg_slot` = 1, SET 0 is taken before the probe. It holds no reflection, which
is what the low-frequency noise reduction needs. Samples taken while `t_n` is high
always read 0, because the transmit buffer then pulls the inverting input high. This
is the *blind spot* of about one pulse width after launch.

**Sign.** The line is on the comparator's inverting input. A positive echo therefore
*lowers* the count, and a negative echo raises it.

## Moving samples into the system clock (`rx_capture`)

This is the subtlest part of the design, and it is not taken from the paper. The
comparator output is sampled by a flip-flop on `rx_clk`. That clock has the same
period as `sys_clk` but any phase phi in [0, Ts), and phi sweeps the whole range
during a measurement. No single `sys_clk` edge can safely pick up the sample for
every phi. Whatever edge is chosen, some phi would put the sample's change right on
it.

`rx_capture` picks, for each phase, the `sys_clk` edge nearest the middle of the
sample's stable window. That leaves at least Ts/4 of margin on both sides:

| zone (from the sequencer) | phi | captured on | then |
|---|---|---|---|
| EARLY | [0, Ts/4) | falling edge, half a cycle later | one more rising-edge stage |
| MID | [Ts/4, 3Ts/4) | next rising edge | - |
| LATE | [3Ts/4, Ts) | falling edge, 1.5 cycles later | - |

In every zone the sample appears exactly two cycles after the `sys_clk` cycle it was
taken in. Its slot index therefore does not depend on the phase.

The sequencer computes phi from j and the fine tap. When the fine delay pushes phi
past Ts, the sampling edge belongs to the previous cycle. The sequencer then takes the
sample's index from one pipeline stage further back. The routing delay of the sampling
clock is not known to the logic. Up to about Ts/4 of such delay (2.5 ns) only
reduces the margin. The end-to-end test runs with 0.6 ns of it.

## Calibration (`autocal`)

With the probe off, the calibration looks for the point where the comparator gives 1
half the time. It does this with two binary searches, each trial counting `CAL_N`
samples (default 1024):

1. **Coarse**, with fine at 0. Find the largest coarse setting at which more than
   half the samples are 1. More jitter-path delay puts the edge later, so the
   probability falls as coarse rises. Then step one coarse tap past that setting.
2. **Fine**. Find the largest fine setting at which at most half the samples are 1.
   More sampling delay samples higher on the edge, so the probability rises.

A last trial at the chosen setting reports `cal_count`. Calibration takes
19 x (8 + CAL_N + 1) cycles. It cannot get closer to 0.5 than one fine tap allows:
about 2.1 ps on the edge, or 4.3 mV at the model's slope of 2 mV/ps. `cal_load`
sets both taps directly instead.

## Waveform buffer and noise reduction

**`waveform_buffer`** stores two waveforms of P_MAX x J counts:

* **PROBE**: measured with probes.
* **BACKGROUND**: measured with `cfg_probe` = 0, so no probe is sent.

It has one write port and two registered read ports. With the defaults this is
2 x 5600 words of 17 bits.

**`noise_reduction`** returns one word per request, two cycles later. It has three
modes:

* **`RD_RAW`**: the stored count.
* **`RD_TONE`** removes system tones. It returns PROBE minus BACKGROUND at the same
  (p, j). Supply ripple locked to the clock appears in both waveforms and cancels.
* **`RD_LFN`** removes low-frequency noise. It returns SET p minus SET 0 at the same
  phase position j. Slow noise (temperature, vibration) is nearly constant during one
  probing, so it is the same in every SET of one position. SET 0 holds only that
  noise, so subtracting it leaves the reflection. System tones have period Ts, so
  this also removes them. In the end-to-end test this mode cuts the spread of the
  quiet samples from 116 to 20 counts (M = 1000).

Results are signed and one bit wider than a count. The design keeps counts; it does
not convert them to volts. After calibration the probability is close to linear in
the voltage, and it can be used as the waveform directly.

## Top level (`itdr_top`)

| group | ports |
|---|---|
| clocks | `sys_clk`; `sys_clk_dly` (after the probe-width line); `rx_clk` (PLL output after the fine line); `rst_n` (synchronous) |
| I/O | `t_n` out to T_N; `d_o` in from D_O |
| PLL | `psen`, `psincdec` out; `psdone` in; PSCLK is `sys_clk` |
| delay lines | `probe_tap`, `coarse_tap` (drive all five jitter-path lines), `fine_tap` |
| measurement | `start_meas`, `cfg_m`, `cfg_p`, `cfg_slot`, `cfg_probe`, `cfg_probe_tap`; `meas_busy`, `meas_done`, `phase_idx`, `probe_count` |
| calibration | `start_cal`, `cal_load`, `cfg_coarse`, `cfg_fine`; `cal_busy`, `cal_done`, `cal_count` |
| read-out | `rd_req`, `rd_mode`, `rd_bank`, `rd_p`, `rd_j`; `rd_valid`, `rd_data` |

The top ignores a start of one operation while the other is running. Hold the
configuration steady while busy.

Parameters: `P_MAX` (10), `J` (560), `M_MAX` (100 000), `CAL_N` (1024). `J` must
equal the number of PLL phase steps in one period Ts, because the phase step is fixed
by the PLL. The sampling period and the tap size are in `itdr_pkg`. `cfg_m` and
`cfg_p` can change at run time, up to their maxima.

## Where this follows the prototype and where it does not

These parts follow the prototype:

* the transmit, receive and jitter-clock arrangement of the I/O;
* the AND-gate pulse generator;
* the PLL phase stepping, with 12 cycles per step;
* five chained coarse delay lines sharing one tap, plus one fine line;
* calibration toward probability 0.5;
* the three-step measurement;
* both noise reductions, including SET 0 as the reference.

These are choices of this design, with nothing given for them in the source:

* the `armed` gate on the pulse;
* the warm-up probing;
* the return phase step;
* the zone-based clock crossing;
* the binary-search calibration;
* the buffer organisation;
* doing the subtractions in hardware;
* the host port interface.

Other points where the design departs from or goes beyond the description:

* **Which pad carries the line.** The transmitter and receiver description puts the
  line on the comparator's inverting input and the jitter clock on the
  non-inverting one, which is what is built here. A passage in the theory section
  calls the jitter clock's input "noninverting" and the "negative input" at once.
  That passage was not followed where it disagrees.
* **Phase step.** The PLL can step as finely as 11.12 ps (89.6 GSPS). The prototype's
  settings, and this design's defaults, use 17.86 ps (J = 560). J is a parameter
  because the step is set by the PLL's VCO, not by the logic.
* **Extra jitter.** The coarse delay lines add jitter to the jitter clock, which only
  helps the conversion. The models leave this out and give the jitter clock its full
  jitter directly.
* **Size.** The prototype reports about 1 900 LUTs and 1 600 registers for its whole
  instrument, which probably includes its host link. The logic here is far smaller:
  about 190 flip-flops besides the waveform RAM. The host side is left to the user.
* **Volts.** No probability-to-voltage table is built. After calibration the
  prototype used the probability directly as the waveform, and so does this design.

The source gives two values of M for the same 80 uV resolution: M = 1000 in its
experiments and M = 100 000 in its summary. The resolution formula, 3.92 * sqrt(0.25/M),
gives 0.006 only for M = 100 000. The counters are therefore sized for 100 000, and M
is a run-time value.

## Simulation

The testbenches need Verilator 5 with `--timing`, because the models use delays. All
files carry `` `timescale 1ps/1fs ``. Each block has a self-checking testbench that
prints `TB_RESULT checks=N failures=F`:

| testbench | what it checks |
|---|---|
| `tb_probe_pulse_gen` | pulse start, width per tap, no pulse without `fire` |
| `tb_rx_capture` | two-cycle latency for 40 phases across Ts, all three zones |
| `tb_ets_sequencer` | every `fire` and `zone`, measurement length, J phase steps, every count; one run with the fine delay pushing a phase past Ts (P = 4, J = 8, M = 5) |
| `tb_waveform_buffer` | random writes and reads on both ports |
| `tb_noise_reduction` | all three modes against a reference |
| `tb_autocal` | coarse and fine results against an exhaustive search, run time, load |
| `tb_itdr_top` | end to end at J = 28, M = 40 (under a second) |
| `tb_itdr_full` | the same at the defaults with M = 1000: about 11 M cycles, about 2.5 minutes |
| `tb_itdr_hdmi` | four cable set-ups (open connector; cable with open end; terminated; bent at two places), each echo with its sign at its place, no false echoes (J = 28, M = 200, a few seconds) |

The end-to-end tests wire `itdr_top` to these models:

* `mmcm_ps_model`: the PLL with phase shift. Its reset input must be held while the
  logic is in reset, as on the real part. Otherwise a `psen` that has not been reset yet
  can start a stray phase step, and every later sample is then one step late.
* `idelay3_model`: a 512-tap, 1.1 ns delay line.
* `bidi_diff_io_model`: the I/O, the line and the noise, with:
  * a jitter-clock edge of 2 mV/ps;
  * 4 ps of jitter, i.e. 8 mV, the prototype's measured jitter noise;
  * a 20 mV comparator offset;
  * a clock-locked tone and a slow drift;
  * echoes at 2.9 ns (+20 mV, the connector) and 22.36 ns (-5 mV, the far end of a
    cable).

These tests check:

* the calibrated taps against the model's geometry;
* the cycle counts and the number of probes;
* exact read-out arithmetic;
* zeros in the blind spot;
* both echoes, with the right sign, where the line puts them;
* the noise of the quiet samples, which subtracting SET 0 must lower.

They count each mechanism and fail if one never happens:

* calibration;
* probe pulses;
* the background run;
* the phase steps;
* all three capture zones;
* the blind spot;
* both noise reductions.

Example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/itdr_pkg.sv tb/tb_itdr_top.sv \
          --top-module tb_itdr_top
./obj_dir/Vtb_itdr_top
```

## Limits

* The simulations have zero delay inside the logic. They show that every sample
  lands at the right index for every phase. They cannot show the setup and hold
  margins that the zone logic exists to provide. The margins have to be confirmed by
  timing analysis on the target device.
* The counters and buffer words hold counts up to 100 000. The longest simulated run
  uses M = 1000 at full size: a run at M = 100 000 would take 560 M cycles.
* The I/O model evaluates the comparator only at the sampling instants. It has no
  analog bandwidth, no pulse shape beyond triangles, and no real hysteresis.
* `t_n` is a gated clock-derived pulse. On an FPGA it must come from fabric logic
  placed and routed with care, and it cannot be checked by static timing the usual
  way.
