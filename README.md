# Step-response emulation of an 8 GT/s serial link

This RTL emulates a mixed-signal serial-link transceiver using only digital
logic. The analog part is a lossy channel followed by an adjustable receive
CTLE (continuous-time linear equalizer). Its input only ever changes on a
transmit clock edge, so its output can be computed exactly as a sum of
precomputed step responses. There is no need to integrate a differential
equation on a fine time grid. Emulated time also does not advance in fixed
steps: each emulator cycle jumps straight to the next emulated clock edge. The
time resolution (1 fs here) is therefore independent of the emulation rate.
With one TX clock and a two-phase RX clock, a unit interval (UI) costs three
emulator cycles.

The design follows the architecture of Herbst, Lim and Horowitz, "Fast FPGA
emulation of analog dynamics in digitally-driven systems" (ICCAD 2018). The
block structure, the tap count, the settings and the clock-module structure
come from that paper. Widths, number formats, handshakes, the contents of the
small tables and everything else the paper leaves open are this design's own
choices. They are listed in the section "What is taken from the architecture
and what is not".

## The method in one formula

Take a linear system with step response F(t). Drive it with a piecewise-constant
input that takes the value x_k from time t_k until the next edge. Its output is

    y(t) = sum_k x_k * ( F(t - t_k) - F(t - t_{k-1}) )

Here t_0 is the most recent edge. Its term is x_0 * F(t - t_0), because F is
zero for negative time. Each term is a *pulse response*: the difference of two
samples of the same step response. The sum is exact for any edge times, so
clock jitter on the driving clock is modelled for free: jittered edge times
simply enter the formula. The sum is truncated after N_TAPS edges. With 85 taps
of 125 ps the history spans about 10.6 ns. That is enough when the step
response has settled by then.

The CTLE zero has 16 settings. Every tap therefore stores 16 step responses
(channel convolved with each CTLE setting), and the current setting selects one
of them. What happens while the setting is switching is not modelled: the new
response applies to the whole history at once.

## Time manager (`time_manager`, `clock_module`, `lfsr`)

Every emulated clock is a `clock_module` that stores `time_out`, the time of its
next edge. The time manager takes the earlier of the two clocks' `time_out`
values as the emulation time of the cycle (`emu_time`). Every clock whose
`time_out` equals it fires in that cycle:

* it asserts the `cke_out` bit of its current phase (a rotating one-hot mask);
* it adds `period + jitter` to `time_out`;
* it steps its LFSR.

The jitter is `jitter_scale * r`, where r is the 16-bit LFSR state read as a
signed fraction in [-1, 1). The edge spacing is therefore uniform in
[period - J, period + J) with J = `jitter_scale` in fs.

* The TX clock has one phase. Its period is the parameter `TX_PERIOD` (125 ps).
* The RX clock has two phases: `rx_cke_p` drives the data sampler and
  `rx_cke_n` the edge sampler. Each edge advances by half of `rx_period`,
  which comes from the DCO table and can change from one edge to the next.

A cycle always contains at least one edge; an assertion checks this. Two edges
share a cycle only when their times are exactly equal.

Times are 32-bit unsigned femtosecond counts. They wrap every 4.29 us, and every
comparison is made on a difference (`hsl_pkg::time_before`). The design
therefore runs indefinitely, as long as no two times in use are more than about
2.1 us apart.

On an FPGA, the paper gates the free-running emulator clock with each `cke_out`
to make real clocks. This RTL keeps a single clock and uses the `cke` signals
as clock enables. They are top-level outputs, so a clock-gating primitive can be
added outside.

## Analog dynamics engine (`analog_dynamics`)

The ADE is an array of N_TAPS taps. It keeps two histories:

* `time_hist[k]`: the times of the last N_TAPS TX edges. It shifts on `cke`
  (a TX edge).
* `value_hist[k]`: the input value that held *before* edge k. It shifts one
  cycle later (`cke_d`), because the TX FFE output changes only after the
  edge cycle.

Each cycle, tap k evaluates `step[k] = F_s(emu_time - time_hist[k])` in its
own PWL table. The output is

    out = step[0]*value  +  sum_{k>=1} (step[k] - step[k-1]) * value_hist[k-1]

That is two multipliers per tap (one inside the PWL table, one for the weight)
and one adder chain.

**Timing, the least obvious part.** The PWL tables have registered outputs.
`out` in cycle c+1 is therefore y(emu_time of cycle c), evaluated with the
history as it was *before* any edge of cycle c. At a TX edge the new step
contributes F(0) = 0, so this is the correct value at the edge. To keep the
product stage consistent with the registered lookup, the input is registered
once (`value_q`) before it meets the products and `value_hist`. The receiver
accordingly samples `ctle_out` one cycle after an RX edge.

**Domain trimming.** Tap k (0-based) only ever sees time differences between
k·(T−J) and (k+1)·(T+J), where T is the TX period and J the largest TX jitter
the tables were built for. Each tap's table covers only that window. Its start
`tau0` and its segment width `2^shift` are loaded per tap. Lookups outside the
window clamp to the first or last point. This happens only for history slots
still empty after reset, whose value is zero.

## PWL tables (`pwl_table`)

A table holds `N_SETTINGS` functions of `2^SEG_BITS` equal segments. Segment j
starts at tau_j = tau0 + j·2^shift and stores an offset a (the function value
at tau_j) and a slope b (scaled by 2^SLOPE_FRAC). For an argument x:

    k = (x - tau0) >> shift,   f = (x - tau0) - k·2^shift
    out = a[s][k] + (b[s][k] · f) >>> SLOPE_FRAC        (saturated, registered)

The same module serves two purposes:

| use | settings | segments | offset / slope | slope scale | argument |
|---|---|---|---|---|---|
| ADE tap | 16 | 32, or 64 on taps 31–32 | 18 / 18 bits, Q2.16 | 2^14 per fs | t − t_k in fs |
| DCO table | 1 | 4 of 4096 codes | 20 / 20 bits, fs | 2^10 per code | 14-bit code |

The DCO table totals 4 × 40 = 160 bits. It stores T_RX(n) = 1/(α + βn). In the
paper's start-up example, code 1000 is 7.6 GHz and code 8192 is 8.0 GHz, so
α = 7.544 GHz and β = 55.6 kHz per code. The four chords stay within 0.05 % of
the curve.

To fill ADE tap k, which has N segments, for setting s with step response F:

* shift is the smallest value with N·2^shift ≥ (k+1)(T+J) − k(T−J), and
  tau0 = k(T−J). With J = 4 ps and N = 32 the largest shift is 15, within
  `FRAC_W` = 16.
* Let w = 2^shift, t_j = tau0 + j·w, and let m_j be the sag of the chord at
  the segment midpoint: (F(t_j) + F(t_j + w))/2 − F(t_j + w/2).
* The offset is a_j = round((F(t_j) − m_j/2)·2^16).
* The slope is b_j = round((F(t_j + w) − F(t_j))·2^16 / w · 2^14).

Lowering the chords by half their sag splits the error evenly between the
middle and the ends of each segment. The paper fits each segment by linear
programming; this simpler fit gets most of that benefit.

J should be the true bound of the TX period jitter, which is `tx_jitter_scale`
in fs. A larger J stays correct but stretches every domain, and so every
segment. Depth N should follow the 0.1 % rule above.

## Loading the tables

Tables hold no contents after power-up. They are written through the top-level
port `wr` (type `hsl_pkg::pwl_wr_t`), one word per clock:

* `table_id` 0 … 84 selects an ADE tap and 85 the DCO table.
* `kind = WR_COEF` writes `offset`/`slope` into segment `seg` of setting
  `setting`.
* `kind = WR_DOMAIN` writes `tau0` and `shift`.

Writes are accepted while `rst` is high, and reset does not clear the tables.
The normal sequence is: hold reset, load 85 × (1 + 16 × 32) + 2 × 16 × 32 + 5 = 44,634 words,
then release reset. A second reset restarts the link (time, CDR, histories)
with the tables intact.

## The link around the engine (`hsl_emulator`)

```
PRBS7 -> 3-tap TX FFE --channel_in--> ADE (channel + CTLE) --ctle_out--> (+) --eq_out--> samplers p / n
                                                                          ^                  |
                                                                  2-tap DFE <-- rx_data <-- BBPD --up/down--> PI loop filter
                                                                                                                 | dco_code (14)
            time_manager <------------------ rx_period <---------------- DCO PWL table <-------------------------+
```

* **TX.** `prbs` produces a PRBS7 bit on each TX edge. `tx_ffe` forms
  c_pre·d[n+1] + c_main·d[n] + c_post·d[n−1]. Its 4-bit setting selects
  weights modelled on the ten 8 GT/s PCIe transmitter presets P0–P9, in units
  of 1/256. Settings 10–15 repeat P4 (flat).
* **RX.** `rx_dfe` subtracts w1·d[n−1] + w2·d[n−2] (d = ±1) from `ctle_out`.
  The weights are input ports in Q4.16. Two `sampler`s register the sign of
  `eq_out`: the data sample on the delayed `rx_cke_p`, the edge sample on the
  delayed `rx_cke_n`.
* **CDR.** `bbpd` is an Alexander detector. On a transition it reports `up`
  when the edge sample already equals the new bit (clock late) and `down` when
  it still equals the old one. `loop_filter` is a PI filter: the integrator
  gains ki/16 code per decision, the proportional path kp codes, and the output
  saturates at 0 … 16383. A larger code is a faster RX clock.

Pipeline, counted from the cycle c that carries an edge:

| cycle | what happens |
|---|---|
| c | TX edge: the PRBS and the FFE update (visible in c+1); the ADE looks up time t |
| c+1 | `ctle_out` = y(t); the DFE sums; the sampler takes its sample if c had that RX edge |
| c+2 | the BBPD compares d[n−1], e, d[n]; the loop filter updates |
| c+3 | `dco_code` is valid; `rx_period` is valid at the time manager in c+4 |

## What is taken from the architecture and what is not

From the paper:

* the ADE structure (pulse = difference of neighbouring taps' step values, one
  multiplier per table and one per weight, `time_hist` on `cke`, `value_hist`
  on `cke_d`);
* 85 taps, 16 CTLE settings, per-tap domain trimming, more segments for the
  taps that need them;
* PWL tables made of offsets and slopes;
* the clock module (comparator, jitter = scaled LFSR added to the period,
  rotating phase mask);
* one-phase TX and two-phase RX clocks, with the minimum over next-edge times;
* the block list and wiring of the link: PRBS, 3-tap FFE, 2-tap DFE, BBPD,
  PI filter with kp/ki/init, 14-bit DCO code, a 160-bit DCO PWL table.

This design's own choices:

* **Numbers.** The fs time unit, all widths and fixed-point formats.
* **Tables.** Equal power-of-two segments; clamping outside the domain; the run-time load port.
* **Segment count.** The rule for sizing tables follows the paper: start small
  and double the segment count of a tap until its error is below 0.1 % of full
  scale. The hardware, however, has only two depths. Every tap gets 32
  segments (18,432 bits, the smallest block-RAM piece worth using), and one
  tap range `FINE_TAP_LO..FINE_TAP_HI` gets `2^FINE_SEG_BITS`. The defaults
  (taps 31–32, 64 segments) come from this rule applied to the testbenches'
  synthetic channel with 1.5 ps jitter. Another channel may need other
  values, or a free depth per tap.
* **Pipeline.** The `value_q` alignment register and the extra cycle of RX
  enables.
* **Clock enables** instead of gated clocks.
* **Settings tables.** The PRBS polynomial, the FFE preset table, and the
  BBPD's Alexander logic and sign.
* **DFE weights** as ports.
* **Loop-filter scaling** and 12-bit gains. With 8-bit gains the loop could
  not pull in the 5 % start-up frequency offset.
* **RX start.** The first RX edge is placed 41 ps after the first TX edge.
* **Segment fit.** The testbenches fill segments with chords lowered by half
  their midpoint sag. The paper finds each segment by linear programming. Both
  are table contents and need the same hardware.

Not included:

* the block-RAM, clock-gating and logic-analyzer primitives of a particular
  FPGA board;
* any means of changing settings at run time other than the input ports;
* the generalisation to inputs that are piecewise polynomial rather than
  piecewise constant, which the paper only outlines;
* unbounded (for example Gaussian) jitter. The LFSR jitter is uniform and
  bounded, which is what makes the exact domain windows possible.

Not included:

* the board's differential clock input and clock generation;
* the clock-gating primitive;
* the on-chip logic analyzer used to capture waveforms;
* the host path that changes settings at run time (the settings are plain
  input ports);
* the paper's proposed extensions (piecewise-polynomial inputs, nonlinear
  dynamics).

## Verification

Every module has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

* `tb_analog_dynamics` runs a 12-tap engine with jittered TX edges, two
  evaluation points per UI and a CTLE setting change. The output matches an
  integer model of the pulse-response sum bit for bit. Against the exact
  (unquantized) response the error is 0.39 % of full scale. Taps 1 and 2 are
  built with 64 segments, the rest with 32.
* `tb_pwl_table` and `tb_dco_table` check random tables against the lookup
  formula, domain moves and the clamping, and the DCO curve to 0.05 %.
* `tb_time_manager` compares every cycle with a software merge of the two edge
  sequences. It checks 3 cycles per UI, and 2 when the edges coincide.
  `tb_clock_module` predicts every jittered spacing from a reference LFSR.
* `tb_hsl_emulator` runs the full-size design with no parameter overrides:
  85 taps loaded with a synthetic channel-plus-CTLE step-response family
  (`tb/hsl_tb_pkg.sv`), TX jitter ±1.5 ps, RX jitter ±1 ps, the DCO starting
  at code 1000. It checks:
  * the CDR locks (the DCO code comes within 10 % of 8192 after about 450 ns
    and averages 8230);
  * there are no bit errors over 1500 bits before and after a CTLE and FFE
    setting change;
  * the run takes 3.00 cycles per UI;
  * the DFE output at the data samples forms an open eye. The two levels are
    ±0.60, and each spreads with a standard deviation of 0.035;
  * every mechanism occurs at least once: coincident TX/RX edges, up and
    down decisions, DFE feedback of both signs, jittered spacing and clamped
    lookups.

  It takes about 10 s.

* `tb_accuracy_sweep` is the transient accuracy test at full size. It goes
  through all 16 CTLE settings x 10 FFE presets, 1024 UI each, with jitter on
  and the CDR held open. At every RX edge it compares `ctle_out` with a
  real-valued sum of the pulse responses, built from the TX edge times and FFE
  values it observed. The worst error over all 160 configurations is -0.41 % /
  +0.41 % of the signal peak, and the test fails above 1 %. The table
  contents matter here. The testbench sizes the tap domains with the true
  per-UI jitter bound (1.5 ps). It also lowers each segment's chord by half
  its sag at the midpoint. With a loose 4 ps bound, plain chords and 32
  segments on every tap, the same test gives about ±5 %. With the right bound
  it gives ±1.7 %, and with the lowered chords ±1.3 %. It takes about 15 s.

The step responses used in the tests are synthetic. They have a smooth
second-order rise after a 4 ns flight delay, a DC gain and a peaking term that
depend on the setting. They are not a measured channel, nor a CTLE with two
fixed poles and a zero tuned between 0.4 and 2.0 GHz, as in the paper. All
accuracy numbers above are for this synthetic family. They show that the
engine evaluates its tables correctly, but they do not predict how closely a
real channel's eye would match. The table sizes a real channel needs (domain
width, segment depth, tap count) should be worked out again from its own step
responses.

## Simulating

All files are SystemVerilog 2017. `rtl/hsl_pkg.sv` must be read first. For
example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/hsl_pkg.sv tb/hsl_tb_pkg.sv tb/tb_hsl_emulator.sv --top-module tb_hsl_emulator
./obj_dir/Vtb_hsl_emulator
```

The same command with another `tb_*` file runs a unit testbench. To change the
link, change these:

* `N_TAPS`, `SEG_BITS`, `FINE_TAP_LO`, `FINE_TAP_HI`, `FINE_SEG_BITS` and
  `TX_PERIOD` on `hsl_emulator`;
* the formats in `hsl_pkg`;
* the table contents, which need no new hardware.

A different channel is only a different set of table words.
