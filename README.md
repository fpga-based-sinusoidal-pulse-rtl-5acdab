# Direct sinusoidal PWM controller for a PV / battery / grid home inverter

A small rural home system has four possible energy sources: a 12 V PV panel,
a 12 V battery bank, the utility grid, and a diesel generator (DG) as a last
resort. A 12-0-12 V centre-tap inverter turns the battery into 220 V, 50 Hz
for the house. This RTL is the digital controller of that system. Its main
job is to make the inverter's two base-drive signals. A half cycle of the
output is cut into N pulses whose widths follow a sine. The widths are worked
out when the design is elaborated, not computed at run time, so no carrier
and no sine reference are needed. Around that core sit the logic that reads
the source voltages and picks an operating mode, a sequencer that switches
household loads by priority, and a maximum-power-point tracker for the panel.

The pulse generator follows a published design for a Spartan-3E board
(50 MHz clock, N = 3, 50 Hz). That design was given as a short VHDL state
machine plus equations and a timing table. The other blocks are built from
tables and prose descriptions. Where the original description left a mechanism open, this
RTL makes its own choice, and each such choice is stated below and in the
header comment of the file concerned.

## 1. Placing the pulses (direct modulation)

Take a half cycle as 0..180 degrees and split it into N equal sectors of
180/N degrees each. Pulse i (i = 1..N) sits at the centre of sector i:

    centre_i = (2i - 1) * 180 / (2N)                       degrees
    width_i  = K * (180 / N) * sin((2i - 1) * pi / (2N))   degrees
    rise_i   = centre_i - width_i / 2
    fall_i   = centre_i + width_i / 2

K (0..1) is the voltage regulating factor. A pulse of height 1 that is
`width_i` wide has roughly the same area (volt-seconds) as a sine of peak K
over the same sector. That is why the fundamental of the pulse train comes
out close to K times the fundamental of the full sine, for any N of 3 or
more. The sweep testbench measures 0.968 at N = 3, 0.996 at N = 11 and
0.503 for K = 0.5. With N = 1 and K = 1 the pattern is a plain square wave.

Time is counted in **ticks**. A tick is TICK_DIV board clocks: 10 clocks of
50 MHz, i.e. 200 ns. One half cycle is

    HALF_TICKS = CLK_HZ / (TICK_DIV * 2 * F_OUT_HZ) = 50 000 ticks = 10 ms

Every edge angle is turned into a tick count rounded to the nearest tick.
This is `spwm_pkg::edge_tick`, a constant function that uses `$sin` at
elaboration. For the default N = 3, K = 1 this gives:

| segment | kind  | degrees   | ticks  | time     |
|---------|-------|-----------|--------|----------|
| 0       | notch | 0 - 15    | 4 167  | 0.833 ms |
| 1       | pulse | 15 - 45   | 8 333  | 1.667 ms |
| 2       | notch | 45 - 60   | 4 167  | 0.833 ms |
| 3       | pulse | 60 - 120  | 16 666 | 3.333 ms |
| 4       | notch | 120 - 135 | 4 167  | 0.833 ms |
| 5       | pulse | 135 - 165 | 8 333  | 1.667 ms |
| 6       | notch | 165 - 180 | 4 167  | 0.833 ms |

The 2N + 1 segments are the states of the original state machine (S1..S7 for
N = 3). `spwm_seq` keeps that sequence but does not store segment lengths.
It keeps two things: the tick position `t` inside the half cycle, and the
index `p` of the pulse it is working on. The output `mss` is high while
`rise[p] <= t < fall[p]`. `p` moves on once `t` passes `fall[p]`. The state
number is rebuilt as `2p + (t >= rise[p]) + (t >= fall[p])` and is brought
out as `seg` / `pwm_state`. One result of this scheme is that a pulse of zero
width (small K, or the missing notches of N = 1) needs no special case.

The tables are compile-time constants. Changing N, K or the output frequency
means setting a parameter and elaborating again. Nothing in the hardware
changes, but no register lets you change them at run time.

## 2. From pulses to the inverter output

The centre-tap stage has two switch groups. Closing T1 puts +Vdc across the
load through the transformer. Closing T2 puts -Vdc across it. With both open
the output is 0. The controller produces:

- **MSS** (main switching signal): the pulse pattern above, the same in both
  half cycles;
- **PCS** (polarity control signal): 1 in the positive half cycle, 0 in the
  negative one. It is a 50 Hz square wave.

`gate_steer` combines them into the two drives: `T1 = en & MSS & PCS` and
`T2 = en & MSS & ~PCS`. The result is a three-level waveform:

    MSS   _|~|__|~~~~|__|~|__|~|__|~~~~|__|~|_
    PCS   ~~~~~~~~~~~~~~~~~~|_________________
    T1    _|~|__|~~~~|__|~|___________________
    T2    ___________________|~|__|~~~~|__|~|_
    out   0 +  0  +  0 + 0 0 -  0  -  0 -  0

PCS toggles when the sequencer wraps from the last notch to the first. A
polarity change therefore always falls inside a notch, with MSS low, so T1
and T2 can never be on together. An assertion in `gate_steer` checks this.
The drives are registered, so they lag MSS/PCS by one clock (20 ns).
`en` comes from the mode controller: the inverter switches only in INVERT
mode.

## 3. Source status and operating modes

`source_status` compares the measured voltages with fixed limits. All limits
are constants in `spwm_pkg`:

| bit      | condition                       | input format      |
|----------|---------------------------------|-------------------|
| pv_ok    | PV >= 12.0 V                    | mV, 16 bit        |
| bat_ok   | 10.1 V <= battery <= 13.8 V     | mV, 16 bit        |
| bat_full | battery >= 13.4 V (charge stop) | mV, 16 bit        |
| grid_ok  | 198 V <= grid RMS <= 242 V      | 0.1 V RMS, 12 bit |
| dg_ok    | 198 V <= DG RMS <= 242 V        | 0.1 V RMS, 12 bit |

The design does not include the sensing itself: dividers, ADC and RMS
conversion. The input formats above are this design's own.

`mode_ctrl` then picks the mode. The original description defines four rows of this table,
marked "given". The other four rows are filled in to match its stated
preferences: grid first, battery next, generator only when nothing else is
left.

| PV or battery | grid | DG | mode   | load fed by | battery     |       |
|---------------|------|----|--------|-------------|-------------|-------|
| 1             | 1    | 0  | CHARGE | grid        | charging    | given |
| 0             | 1    | 1  | CHARGE | grid        | charging    | given |
| 1             | 0    | 0  | INVERT | battery     | discharging | given |
| 0             | 0    | 1  | DG     | generator   | charging    | given |
| 1             | 1    | 1  | CHARGE | grid        | charging    |       |
| 0             | 1    | 0  | CHARGE | grid        | charging    |       |
| 1             | 0    | 1  | INVERT | battery     | discharging |       |
| 0             | 0    | 0  | OFF    | nothing     | idle        |       |

"PV or battery" is `pv_ok | bat_ok`. The outputs are:

- `grid_sw`: closes the grid switch;
- `dg_sw`: closes the generator switch;
- `inv_en`: lets the inverter switch;
- `chg_en`: runs the bi-directional converter as a charger. It is active in
  CHARGE and DG mode until `bat_full`.

All outputs are registered, so a change of source reaches the switches
2 clocks after the voltage crosses a limit. There is no hysteresis and no
switch-over delay: both are left to whoever adapts the design to real
relays.

## 4. Load matrix

`load_matrix_ctrl` connects household loads in an order the user sets.
`prio[r]` names the load at rank r, and rank 0 is the most important. The
loads that are on always form a prefix of that ranking, so a single counter
`n_on` describes the state. Once per step (default 1 s) the controller makes
at most one change:

1. if the loads that are on draw more than `p_avail`, the lowest-ranked one
   that is on is switched off;
2. otherwise, if the next-ranked load fits within `p_avail`, it is switched
   on.

Loads therefore come on one per step, from high to low priority, until the
next one would not fit. When the available power falls they go off in the
reverse order. The controller stops at the first load that does not fit: it
does not skip ahead to a smaller, lower-ranked load. Load powers and
priorities are inputs, so they can be changed at run time. The top level
passes 0 W as the available power in OFF mode, so all loads are shed when
every source is lost.

## 5. PV maximum power point tracker

`mppt` holds the reference voltage `v_ref` for the panel's converter. It
uses perturb and observe. On each new (V, I) sample it compares V*I with the
previous sample, turns round if the power fell, and moves `v_ref` one
100 mV step. The reference is kept between 12 V and 21 V. The original
specifies only the goal (hold the panel at its maximum power point, for
200-1000 W/m2), so the algorithm and all its numbers are this design's own.
The converter that follows the reference is not part of the design.

## 6. Top level (`spwm_inverter_top`)

    tick_div --tick--> spwm_seq --mss,pcs--> gate_steer --> gate_t1, gate_t2
    source_status --status--> mode_ctrl --inv_en--^   grid_sw, dg_sw, chg_en
                                   \--mode==OFF--> load_matrix_ctrl --> load_on
    mppt --> pv_v_ref

| parameter        | default    | meaning                                     |
|------------------|------------|---------------------------------------------|
| CLK_HZ           | 50 000 000 | board clock                                 |
| TICK_DIV         | 10         | clocks per PWM tick                         |
| F_OUT_HZ         | 50         | output frequency                            |
| N_PULSES         | 3          | pulses per half cycle                       |
| K_PERMIL         | 1000       | voltage factor K in thousandths             |
| NUM_LOADS        | 3          | loads in the load matrix                    |
| LOAD_STEP_CYCLES | 50 000 000 | clocks between load-matrix steps (1 s)      |

Every other port is a plain number in the units given in sections 3-5:

- **Inputs:** source voltages, PV current and a sample strobe, available
  power, load powers and priorities.
- **Outputs:** MSS, PCS and the sequencer state; T1/T2 drives and the output
  level; the zero-crossing strobe; mode and status; source switches and
  charge enable; load contactors and their count; the PV reference.

One clock domain is used throughout. Reset is synchronous and active low.
After reset the controller is in OFF mode, all switches and loads are off,
and the sequencer is at the start of a positive half cycle.

The design is small: 114 flip-flops and about 250 word-level cells after
generic synthesis at the defaults.

## 7. Where this RTL differs from the original design

- **Middle pulse width.** The original timing table gives the N = 3 middle
  pulse as 2.217 ms and the third notch as 1.950 ms. Its width equation and
  its own VHDL both give 3.333 ms and 0.833 ms, and so does this RTL.
- **Half-cycle length.** The VHDL's state lengths (4167, 8333, 4167, 16667,
  4167, 8334, 4167) add up to 50 002 ticks, i.e. 10.0004 ms. Here the edges
  are rounded inside an exact 50 000-tick half cycle, which makes two
  segments 1 tick (200 ns) shorter.
- **Polarity timing.** The VHDL makes the polarity signal from its own
  free-running 10 ms counter, so it drifts against the pulse pattern by
  20 clocks every half cycle. Here it toggles exactly at the end of the
  pattern.
- **Clocking.** The VHDL clocks its state machine from a divided clock.
  Here the divided clock is a one-clock enable (`tick`), so everything runs
  on the board clock.
- **Parameters.** The original hard-codes N = 3. Here N, K and the
  frequency are parameters, and the pulse tables are computed from them.
- **Sensing and the unspecified rows.** The measurement formats, four rows
  of the mode table, the load-matrix mechanism and the MPPT algorithm are
  this design's own (sections 3-5).
- **Grid range.** The original gives two grid ranges, +/-10 % in its logic
  table and +/-20 % in its specification table. The +/-10 % window is used
  for both grid and generator.
- **Harmonic distortion.** The original reports THD falling from about 48 %
  at N = 1 to a few per cent at N = 5 and above, computed in MATLAB. The
  unfiltered three-level waveform produced here has 48 % THD at N = 1, but
  53-65 % for N = 3..11. Those figures are measured by `spwm_sweep_tb` over
  all harmonics. The original does not say how its figure was obtained (which
  harmonics, which filter), so the RTL is not tuned towards it.
- **Not built.** The power stage, transformer, relays, panel, battery, grid,
  generator and sensors are not built: they are analog or power hardware.
  Nor is the "time regulator" that shares charging between PV and grid; it
  is only named in the original. The power parts reach the controller only
  through the ports listed above.

## 8. Verification

Each testbench checks its block against values it works out independently,
ends with a `TB_RESULT checks=<n> failures=<n>` line, and has a watchdog.

| testbench                   | what it checks |
|-----------------------------|----------------|
| `tick_div_tb`               | tick every DIV clocks and wave shape, DIV = 10 and 7 |
| `spwm_seq_tb`               | defaults: every segment length against the table above and a half cycle of exactly 500 000 clocks; N = 5, K = 0.8 against its own formula; state numbers; zero-crossing flag |
| `spwm_sweep_tb`             | N = 1, 3, 5, 7, 9, 11 (and N = 11, K = 0.5): segment timing, measured fundamental within 4 % of K (4/pi for N = 1); prints the THD |
| `gate_steer_tb`             | full truth table and 200 random vectors, one-clock latency |
| `source_status_tb`          | each limit at, below and above its value; 300 random points |
| `mode_ctrl_tb`              | all 32 status combinations; the four given rows by name |
| `load_matrix_ctrl_tb`       | against a reference model every clock; on/off order with two priority orders; random power levels |
| `mppt_tb`                   | closed loop with a PV curve model, three insolation levels: settles within 2 steps of the maximum |
| `spwm_inverter_top_tb`      | end to end at a 1 MHz clock: every mode, charge cut-off, per-half-cycle pulse count and pulse time on the right gate, no gating outside INVERT, load on/off, tracker reversals; each of these must happen at least once |
| `spwm_inverter_top_full_tb` | all defaults: two 1 s load steps while charging from the grid, then 40 ms of inverting with every pulse and notch length checked to the clock |

Run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -y rtl -y tb rtl/spwm_pkg.sv tb/spwm_seq_tb.sv --top-module spwm_seq_tb
    ./obj_dir/Vspwm_seq_tb

The full-size test simulates about 103 million clocks and takes about a
minute. All the others finish in seconds.

What the tests do not cover: the real analog behaviour of the inverter
(ringing, dead time, transformer saturation), relay timing, and ADC noise
on the thresholds. Also, no parameter changes at run time, because there
are none.
