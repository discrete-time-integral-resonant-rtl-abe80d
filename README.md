# Discrete-time integral resonant control on an FPGA: RTL for a nanopositioner damping loop

A flexure-guided nanopositioner has a sharp first resonance, near 15 kHz for
the fast stage this loop was designed for. That resonance limits scan speed,
and any disturbance can excite it. With a collocated actuator and sensor, such
a stage is a *negative imaginary* (NI) system. An NI plant can be damped
robustly by an *integral resonant controller* (IRC): a feed-through `D` added
to the plant, with an integrator `Gamma/s` closed around the sum.

The design here uses a discrete-time IRC. It is built directly in the
z-domain instead of discretising a continuous-time design. The controller is
one state per axis:

```
    y~_k     = (1 + Gamma*D) * x~_k + Gamma * u~_k
    x~_{k+1} = y~_k                       F(z) = z*Gamma / (z - (1 + Gamma*D))
```

This is the integrator `Gamma/(z-1)` closed around `D`, with its output taken
one step early. That one-step advance is what makes the loop provably stable.
Connect it in **positive** feedback with an NI plant `G(z)`:
`u~_k = r + y_k` and plant input `= y~_k`. The closed loop is then
asymptotically stable whenever

```
    -2/Gamma  <  D  <  -G(1)          (G(1): DC gain of the sampled plant)
```

So tuning needs only the plant's DC gain. In practice you choose D below
`-G(1)`, then Gamma below `-2/D`. The published operating point, which this
RTL uses by default, is **D = -3, Gamma = 0.010**. That puts the controller
pole at 0.97, updated at **1.25 MHz**.

The RTL implements the digital part of that loop for one axis. It decodes the
interferometer's quadrature output into a position, runs the IRC, and
produces the DAC code that drives the piezo amplifier.

## Signal path and clock domains

```
            250 MHz loop                 |              5 MHz loop
                                         |
 quad_a ─┐                               |
 quad_b ─┴─► quad_decoder ──count──► memory_unit ──► position_scaler ──► reference_sum ──► irc_controller ─┐
                 ▲                       |  (count x 6 nm)   (r + y, at the     (2 multiply  │
                 │ encoder reset         |                    1.25 MHz strobe)   cycles)     │
                 │ (bit_sync)            |      sample_timer ──┘                             │
 dac_code ◄── dac_out ◄──ctrl──────── memory_unit ◄──────────────────────────────────────────┘
                                         |      host_regs: r, Gamma, D, encoder reset
```

There are two clocks, as in the original implementation:

* **clk_fast, 250 MHz**, the adapter clock. The decoder must see every
  encoder edge, so it runs here, in integer arithmetic. The DAC register also
  sits in this domain.
* **clk_slow, 5 MHz**. The controller's multiplications do not fit in a 4 ns
  cycle, so it runs in a slower loop, in fixed point. The crossings between
  the loops cost latency. The controller therefore updates once every four
  slow cycles: 5 MHz / 4 = **1.25 MHz**.

In the original system the slow clock comes from the same oscillator. The
crossings here do not rely on that. Each is a toggle request/acknowledge
handshake (`cdc_reg`) and works for unrelated clocks.

### Per-sample schedule (clk_slow cycles)

| cycle | what happens |
|---|---|
| 0 | `sample_timer` strobes; `reference_sum` registers `u~ = sat(r + y)` from the latest position |
| 1 | `irc_controller` sees `start`: `t = sat(u~ + round(D * x~))`, Gamma latched |
| 2 | `y~ = sat(x~ + round(Gamma * t))`; state and output registered |
| 3 | `ctrl_valid` high; the next edge launches `y~` to the fast loop |
| +4..5 fast cycles | `dac_code` updates |

The controller computes `x~ + Gamma*(u~ + D*x~)`. Algebraically this equals
`(1 + Gamma*D) x~ + Gamma u~`, but it uses the two gains as programmed, with
no precomputed product. Cycle 3 is slack, so the schedule has one cycle to
spare.

A move of the encoder appears in the position the controller samples after
roughly 4 to 8 slow cycles: 3 to 4 cycles for the count crossing, plus the
wait for the next strobe. This transport delay, about 1 to 1.6 µs, is part of
the plant the controller sees.

## The quadrature decoder

The stage position is measured by a Michelson interferometer. Its breakout box
emits the displacement as AquadB signals, one quarter period per 6 nm step.
The decoder (`quad_decoder`) registers A and B every 250 MHz cycle and applies
the standard x4 rule:

* a step happens when A or B differs from its value one cycle earlier;
* the direction comes from the *current* B and the *previous* A. If they
  differ the count goes down, otherwise it goes up. The count therefore rises
  while A leads B.

The count is signed 16-bit and wraps. At 6 nm that is ±196 µm before
wrapping. The interferometer measures only relative motion, so the count must
be zeroed once: the host's encoder-reset bit forces it to zero while set. A
step arriving in the same cycle as the reset is counted from zero. Phase
inputs are used as the adapter delivers them; no extra synchronizer is added.
If both phases change in one cycle, the motion is too fast for 250 MHz
sampling, and the step is counted only once.

## Number formats

| quantity | format | unit | range / step |
|---|---|---|---|
| step count | signed 16-bit integer | 6 nm | ±32768 counts |
| position, reference, controller input | Q16.16, 32 bits | µm | ±32768 µm, 15 pm |
| controller output | Q16.16, 32 bits | V at the DAC | ±32768 V |
| Gamma, D | Q3.20, 24 bits | — | ±8, 9.5e-7 (Gamma = 0.0100002) |
| DAC code | signed 16-bit | 1 V / 2^15 | ±1 V full scale |

Each product is rounded to nearest, with ties going up. Every sum and product
saturates rather than wrapping. The position is `count * 100663 / 2^8`. Here
100663 is round(6 nm · 2^24 / 1 µm), which is 6 nm to within 3 parts per
million. The controller output is in volts at the DAC. The amplifier gain
(20 in the original set-up) and the stage sensitivity together form the plant
DC gain `G(1)`, which must stay below `-D` = 3.

## Host interface

The host writes registers synchronously to `clk_slow`:

| addr | register | reset value |
|---|---|---|
| 0 | reference r (Q16.16 µm) | 0 |
| 1 | Gamma (Q3.20, bits 23:0) | 10486 (0.010) |
| 2 | D (Q3.20, bits 23:0) | −3145728 (−3) |
| 3 | bit 0: encoder reset (level) | 1 |

The encoder reset is set when the design comes out of reset, so the count
stays at zero until the host clears the bit. The controller reads the gains
when an update starts. A write therefore takes effect at the next sample,
never halfway through an update. The host reads back `step_count`,
`position_um` and `ctrl_out`, which are plain output ports.

## Files

| file | contents |
|---|---|
| `rtl/irc_pkg.sv` | widths, fixed-point types, default gains, saturating add and rounded multiply |
| `rtl/quad_decoder.sv` | AquadB decoder, 250 MHz |
| `rtl/cdc_reg.sv` | one-word toggle-handshake clock-domain crossing |
| `rtl/memory_unit.sv` | count fast→slow and controller output slow→fast |
| `rtl/position_scaler.sv` | count → µm |
| `rtl/sample_timer.sv` | 1.25 MHz strobe from 5 MHz |
| `rtl/reference_sum.sv` | `u~ = r + y`, sampled and saturated |
| `rtl/irc_controller.sv` | the discrete-time IRC, P inputs and outputs (P = 1 in the top) |
| `rtl/dac_out.sv` | rounding, clipping DAC register, 250 MHz |
| `rtl/host_regs.sv` | host-written registers |
| `rtl/reset_sync.sv`, `rtl/bit_sync.sv` | reset release and level synchronizer per domain |
| `rtl/irc_fpga_top.sv` | the whole datapath |
| `tb/tb_*.sv` | one self-checking bench per module, the end-to-end step-disturbance bench `tb_irc_fpga_top`, and the frequency-response bench `tb_irc_frf` |

## Simulation

Every bench prints `TB_RESULT checks=N failures=M` and ends itself. Each also
has a watchdog. Build and run a bench with verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
    -y rtl -y tb +libext+.sv -Irtl \
    --top-module tb_irc_fpga_top rtl/irc_pkg.sv tb/tb_irc_fpga_top.sv
./obj_dir/Vtb_irc_fpga_top
```

Replace the bench name to run another one. All benches except
`tb_irc_frf` finish in about a second.

`tb_irc_fpga_top` runs the design at its default parameters and closes the
loop around models that are not part of the design:

* a single-mode stage model: 14.86 kHz, damping ratio 0.01, 1 µm/V;
* a DAC model;
* an encoder model that quantises the model position to 6 nm and plays it
  out as AquadB.

The bench applies a 0.5 V step disturbance at the plant input. It does this
once with the DAC disconnected and once with the loop closed. Then it
compares the residual vibration 0.3 to 0.8 ms after the step. Typical output:

```
open loop  : residual vibration 0.37 um, mean 0.505 um
closed loop: residual vibration 0.056 um, mean 0.749 um
damping of the residual vibration: 16.3 dB
```

The closed-loop mean matches the prediction `KP·d / (1 − KP·F(1))` with
`F(1) = 1/3`. Along the way the bench checks that:

* every controller output is bit-exact with an integer model;
* outputs come every 800 ns;
* every DAC code is the rounded, clipped controller output, and arrives on
  time;
* the count follows the encoder in both directions through two encoder
  resets;
* the host gain writes act;
* a large reference clips the DAC.

The damping figure depends on the assumed model, so it shows that the loop
works, not that it matches the real stage. The original experiment reported
about 14 dB of damping at resonance on the real hardware.

`tb_irc_frf` measures the frequency response from a sinusoidal disturbance
at the plant input to the measured position. It uses the same models, loop
open and loop closed. It runs a lock-in over whole periods after 5 ms of
settling, at seven frequencies from 5 to 30 kHz. The bench checks three
things:

* the open-loop measurement agrees with the model's analytic gain;
* the resonance peak falls by at least 10 dB;
* no frequency is amplified by more than 6 dB.

With the default gains it reports:

```
   f [kHz]   open [dB]  closed [dB]
      5.00       1.09        2.84
     10.00       5.26        5.94
     13.50      15.11       13.81
     14.86      33.94       16.75
     16.50      12.62       10.87
     20.00       1.85        1.65
     30.00      -9.86       -9.91
```

That is about 17 dB less peak gain at resonance for the assumed model. The
original hardware measured about 14 dB on the real stage. Below the
resonance the closed loop gains slightly, which follows from the controller's
positive DC gain F(1) = 1/3. This bench simulates about 100 ms and takes
about 10 s.

The unit benches check each module against values worked out independently:

* the decoder, with a random walk and sweeps through the 16-bit wrap;
* both crossings, for staleness, loss, order and latency;
* the position scaling against real arithmetic;
* the controller, bit-exact, against a real-valued model (within 1 nm), at
  DC gain 1/3 and under saturation;
* the DAC rounding and clipping;
* the strobe period;
* the register reset values.

The benches use `$urandom` and no constraint solver. Every variable they read
is initialised, so they also run on two-state simulators.

## What follows the original design and what is this design's own

Taken from the original system:

* the controller equation and its stability condition;
* the gains D = −3 and Gamma = 0.010;
* the 250 MHz / 5 MHz split and the 1.25 MHz update rate;
* the decoder's structure: registered phases, ±1 selection from current B
  and previous A, a reset that forces zero, and a signed 16-bit count;
* 6 nm per count;
* a summing junction for a reference ahead of the controller;
* a memory stage between the loops;
* a DAC after the FPGA;
* a host PC.

Chosen here, because the source gives only the function or nothing at all:

* all word lengths and Q formats;
* rounding and saturation;
* the two-cycle multiply schedule inside the four-cycle sample;
* the handshake used to cross clock domains;
* where the count is scaled (in the slow loop);
* the DAC width and ±1 V full scale;
* the host register map, reset values and encoder-reset behaviour;
* the reset scheme;
* the sign convention: A leading B counts up, and positive DAC volts give
  positive displacement in the bench.

Not included:

* the analog and bought parts: interferometer, encoder box, level converter,
  adapter, DAC chip, amplifiers and stage;
* the clock generator that derives 5 MHz from 250 MHz. Both clocks are
  inputs.
* a multi-axis datapath. `irc_controller` has a parameter `P` for the
  matrix form of the controller: Gamma and D are P×P, and each row of a
  matrix-vector product is summed at full precision and rounded once. Its
  bench tests P = 2 with cross-coupled gains. The top, like the experiment,
  damps one axis and uses P = 1; the decoder, crossings and DAC path are
  single-channel.

## Changing it

* **Gains.** Write them at run time, or change `GAMMA_INIT`/`D_INIT` on
  `irc_fpga_top`. Keep `-2/Gamma < D < -G(1)` for your plant, in the units
  of the DAC volts and the measured µm.
* **Sample rate.** Set `SAMPLE_DIV`. It must be at least 3, because an
  update takes 2 cycles after the strobe's one. An assertion in
  `irc_controller` flags a strobe that arrives while an update is busy.
  Changing the rate changes the controller: the same D and Gamma give a
  different F(z) in physical frequency.
* **Sensor resolution.** Set `STEP`, in picometres per count.
* **DAC.** Set `DAC_W` and `FS_LOG2` (full scale ±2^FS_LOG2 V). They need
  `16 − (DAC_W−1) + FS_LOG2 ≥ 1`; otherwise elaboration stops with an error.
