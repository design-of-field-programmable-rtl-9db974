# A hardware DC-machine emulator for testing motor controllers

A motor controller is normally validated against a real motor, where a bug
can destroy the machine. An emulator stands in for the motor: it receives
the controller's commands and answers with the current and speed a real DC
machine would show. To be believable it has to compute one model step far
faster than the controller samples (controllers sample every few
microseconds or slower), so the model runs in logic rather than on a
processor.

This RTL is that emulator plus the small amount of hardware around it in a
hardware-in-the-loop (HIL) bench. A soft processor (not included) runs the
speed and current controllers. The hardware:

| module | role |
|---|---|
| `dcm_emulator` | motor model co-processor, one float32 step of current and speed per enable |
| `fp32_mul`, `fp32_add` | pipelined IEEE-754 single-precision units used by the emulator (5 + 4) |
| `pwm_module` | turns the controller's duty cycle into two complementary chopper commands C0/C1 |
| `step_timer` | paces the emulator at exactly one step per microsecond |
| `dcm_emulator_system` | top level: all of the above, plus the debug pins |
| `fp32_pkg` | float32 type, model coefficients, chopper-mode enum, debug-pin struct |

The design follows a published HIL platform built on a Virtex-II Pro FPGA
with a MicroBlaze processor. There, the emulator was generated from C by a
high-level synthesis tool. The RTL here is written by hand from that
description: the equations, coefficients, operator counts, port names,
clock and rates come from it. The handshake details and the internals of
the arithmetic units are this design's own choices. Section 8 lists them.

## 1. The motor model

The controlled system is an H-bridge chopper feeding a DC motor with a
mechanical load. The chopper turns the supply Vin into the armature voltage
Vh. The motor model is the usual pair of equations:

    dIm/dt = (Vh - Km*Wm - Rm*Im) / Lm
    dWm/dt = (Km*Im - Cr) / J          Cr = K1*Wm^2*sign(Wm) + K2*Wm + K3*sign(Wm)

These are discretised with a fixed computing step `hor`. The result is a
linear recurrence whose coefficients fold in Lm, Rm, J, Km, the load terms
and the step:

    Vh(k)    = (2*alpha(k) - 1) * Vin                          (chopper, mean value)
    Im(k+1)  = a*Im(k) + beta*Wm(k) + gamma*Vh(k)
    Wm(k+1)  = lambda*Im(k) + mu*Wm(k) + nu*sign(Wm(k))

The built-in values are for hor = 350 ns. They are parameters of
`dcm_emulator` (float32 bit patterns; the decimal values are in `fp32_pkg`):

| coefficient | value | float32 |
|---|---|---|
| a | 0.9995 | 3F7FDF3B |
| beta | -9.1977e-5 | B8C0E3C7 |
| gamma | 4.9987e-4 | 3A0309B5 |
| lambda | 1.4603e-4 | 39191FA1 |
| mu | 1 | 3F800000 |
| nu | 0 | 00000000 |
| Vin | 60 V | 42700000 |

With mu = 1 and nu = 0 there is no friction. So at steady state Im goes to
zero and Wm goes to -gamma*Vh/beta, which is 5.435 rad/s per volt.

In the HIL set-up the chopper is modelled switch by switch rather than by
its mean value. Each step, Vh is +Vin when C0 = 1 and C1 = 0, and -Vin
when C0 = 0 and C1 = 1. In every other case (including a PWM that has
stopped) Vh is 0.

## 2. One emulator step, cycle by cycle

All values are IEEE-754 single precision, and all operators are pipelined.
A multiplier has a latency of `MUL_LAT = 5` cycles and an adder has
`ADD_LAT = 7`. Either unit can accept new operands every cycle. The
emulator has exactly five multipliers and four adders. It gets the work of
seven products and four sums out of them by starting every independent
product at once and reusing one multiplier:

```
cycle 0      m0 = 2Vin*alpha   m1 = a*Im   m2 = beta*Wm   m3 = lambda*Im   m4 = mu*Wm
cycle 5      a0 = m0 - Vin  (= Vh)                        a3 = m3 + m4   (= Wm(k+1))
cycle 12     m0 = gamma*Vh                                a3 done at cycle 12
cycle 17     a1 = m1 + m0   (a*Im + gamma*Vh)
cycle 24     a2 = a1 + m2   (... + beta*Wm = Im(k+1))
cycle 31     a2 done -> cycle 32: Im(k+1), Wm(k+1) written to the output registers
```

So the open-loop step takes 2*MUL_LAT + 3*ADD_LAT + 1 = 32 cycles from the
clock edge that accepts alpha to the edge that writes both results. That
matches the 32-cycle delay estimated for the original generated core. With
a reader that is always ready, a new alpha is accepted every 34 cycles,
which is 340 ns at 100 MHz (350 ns was measured on the original).

In the HIL set-up there is no multiply or subtract for Vh: it is one of
three constants chosen by C0/C1. So multiplier 0 computes gamma*Vh in cycle
0, and the step takes MUL_LAT + 2*ADD_LAT + 1 = 20 cycles.

Some details follow the original data-flow graph rather than the plain
equations:

* The current equation adds a*Im and gamma*Vh first, then beta*Wm. Float
  addition is not associative, so this order is part of the
  specification. It also puts the long Vh path in the middle of the
  chain.
* The speed equation uses Im(k), not Im(k+1). The drawn data-flow graph
  places Im(k+1) near the lambda multiplier. But the published simulation
  values only come out with Im(k): the first step's speed is exactly 0
  while its current is not. Using Im(k) also lets the speed equation run
  in parallel with the current equation and finish 19 cycles earlier.
* The nu*sign(Wm) term changes only a sign bit. It needs a fifth adder,
  which is generated only when `NU` is non-zero. The built-in nu is 0, so
  the default build has exactly four adders.

The schedule is a seven-state FSM (`S_IDLE, S_MUL, S_VH, S_GVH, S_SUM1,
S_SUM2, S_OUT`). Each state advances on the `out_valid` of the unit it
waits for. Changing either latency parameter therefore changes the timing
but not the results. An assertion checks that the speed result is always
ready before `S_OUT`.

## 3. Float32 units

`fp32_mul` multiplies the two 24-bit significands into a 48-bit product. It
normalises by at most one place and rounds to nearest, ties to even.

`fp32_add` keeps the operand of larger magnitude and shifts the other right
into a 27-bit field, so that guard, round and sticky bits survive. It then
adds or subtracts, renormalises with a leading-zero count, and rounds to
nearest-even.

Both units compute in one combinational stage followed by `LAT` registers.
The registers are meant to be spread through the logic by retiming. This
keeps the RTL short and gives the FSM a fixed latency. Special values are
simplified:

* subnormals are treated as zero, and results that underflow flush to zero;
* overflow gives infinity;
* NaN in, Inf - Inf or 0 * Inf gives a quiet NaN;
* exact cancellation gives +0.

None of these cases occurs in the motor model's normal operating range.
Both units match a double-precision reference, rounded once to float32, bit
for bit. The tests use tens of thousands of random operands, plus directed
rounding ties and carries.

## 4. Two set-ups, selected by `CHOPPER`

**Open loop (`CHOP_ALPHA_EQ4`).** The processor sends alpha as a float over
a point-to-point FIFO link. The emulator answers every alpha with one Im/Wm
pair. No PWM or timer is instantiated, and the emulator runs as fast as it
can. This set-up checks speed and numerical accuracy.

**Hardware in the loop (`CHOP_C0C1`, the default).** This set-up makes
three changes:

* The processor no longer sends alpha to the emulator. It writes the duty
  cycle into `pwm_module`.
* The PWM drives the chopper commands C0/C1. These leave the chip on pins
  and are also fed to the emulator.
* `step_timer` fires every 1 µs, and each tick starts one step.

The emulator could step every 350 ns. Running it at a fixed 1 µs gives the
bench a round time base. Because the coefficients are for hor = 350 ns,
the emulated motor then runs about 2.9 times slower than real time. The
original bench accepts this, and it is kept here.

The two set-ups differ in one more way: what happens when nobody reads the
results.

* In open loop, a result waits in its output register and the next alpha
  is refused until both results have been read. This is back-pressure, the
  behaviour of a blocking stream write.
* In HIL mode, every step overwrites the output registers. The processor
  reads the state only every few microseconds (every 15 µs in the original
  bench), and it must see the newest state, as it would from a sensor. A
  blocking write would make the motor wait for the processor instead.

### The PWM

`pwm_module` has a free-running counter over PERIOD = 100 MHz / 16 kHz =
6250 cycles. C0 = (count < alpha*PERIOD) and C1 = not C0, with no dead
time. The mean chopper voltage is therefore (2*alpha - 1)*Vin, the same
as the open-loop formula.

The module has two registers. A write to address 0 sets alpha as a 16-bit
fraction (alpha*65536); it takes effect at the next period start. Bit 0 at
address 1 enables the outputs. `inhibit` forces C0 = C1 = 0 at once. This
is the controller-fault test, in which the PWM stops driving the chopper
for 15, 30 or 60 µs: the emulator sees Vh = 0 for that many steps. A
concurrent assertion checks that C0 and C1 are never high together.

## 5. Interfaces

The emulator's stream ports keep the names of the generated core,
`p_Producer_alpha_*` and `p_Consumer_{alpha,im,wm}_*`. Each stream has
`_data` (32 bits), `_en`, `_rdy` and `_eos`. A word moves on a clock edge
where `_en` and `_rdy` are both high.

* `alpha_rdy` says that the emulator can take an alpha.
* `im_rdy` / `wm_rdy` say that a result is waiting.
* An alpha word offered with `alpha_eos` high closes the stream. Both
  output `_eos` flags then rise and the emulator stops until reset.

The top level `dcm_emulator_system` has these ports:

| group | ports | connects to |
|---|---|---|
| clock/reset | `clk` (100 MHz), `rst` (synchronous, active high) | |
| alpha stream | `alpha_data/eos/en/rdy` | processor link 0 (open loop only; idle in HIL mode) |
| results | `im_*`, `wm_*` | processor links 1 and 2 |
| PWM registers | `pwm_wr_en`, `pwm_wr_addr`, `pwm_wr_data` | processor peripheral bus slave |
| fault test | `pwm_inhibit` | |
| chopper pins | `c0`, `c1` | |
| debug pins | `dbg` (`dbg_pins_t`) | logic analyser |

The `dbg` pins carry the stream `en`/`rdy` flags, C0, C1, the step tick,
busy, and the PWM period start. Watching `alpha_en` and `im_rdy` on these
pins is how the step time can be measured on a board.

Reset clears Im and Wm to zero, the output flags, the PWM (outputs off) and
the timer phase. The first tick comes 100 cycles after reset.

## 6. Verification

Every testbench is self-checking and prints one `TB_RESULT` line.

| testbench | what it shows |
|---|---|
| `tb_fp32_mul`, `tb_fp32_add` | bit-exact results against a double-precision reference rounded to float32 (`tb/fp32_ref_pkg.sv`); exact latency |
| `tb_dcm_emulator` | the first two published steps from rest with alpha = 0.75 reproduced bit for bit (Im = 3C75B233, Wm = 0, then Im = 3CF5A27A, Wm = 3612EE22, with lambda = 1.46e-4 as in that run); 400 random open-loop steps with a stalling reader; end of stream; 400 HIL steps over all C0/C1 combinations with nu != 0, overwrite and ignored early ticks; step latencies 32 and 20 cycles |
| `tb_step_timer` | 100-cycle pace, first tick, restart on reset |
| `tb_pwm_module` | 6250-cycle period, C0 duty for six alphas, complementary outputs, update at period start, enable and inhibit |
| `tb_dcm_emulator_system` | whole HIL hardware at default sizes, about 2600 steps, each compared with a float32 model fed from the C0/C1 pins; 100-cycle pace; duty 0.7 and 0.3; faults of 15/30/60 µs giving 15/30/60 zero-voltage steps; reads every 15 µs with overwrites |
| `tb_open_loop_workload` | open loop from rest at alpha = 0.7, 300 000 steps, all bit-exact with the model; the speed settles at 130.18 rad/s; step period 34 cycles |
| `tb_hil_closed_loop_workload` | 1.5 s of HIL operation (150 million cycles) with a behavioural model of the PI controllers; the speed holds 100 rad/s within 0.1 % over the last 0.4 s, through three inserted faults |

About the open-loop steady state: the real-valued fixed point of the
coefficients is 130.43 rad/s. In float32 the speed stops rising at
130.18 rad/s. At that point lambda*Im has fallen below half a unit in the
last place of Wm, so adding it no longer changes Wm. The reference figure
quoted for this test is 130.1308 rad/s, 0.04 % away.

The controller model in the closed-loop test uses incremental PIs:
out(k) = out(k-1) + kp*e(k) + kpi*e(k-1).

* Speed loop: every 20 ms, gains 0.142 / -0.1111, current reference
  limited to ±13 A.
* Current loop: every 300 µs, gains 1.1737 / -1.0150.

The current PI's output is taken as the mean chopper voltage, so
alpha = (u/Vin + 1)/2. That mapping is an assumption; it is what makes
the published gains settle at 100 rad/s.

## 7. Simulating

Every file is one module or package, named after the file. The packages
must come first. Example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/fp32_pkg.sv tb/fp32_ref_pkg.sv rtl/fp32_mul.sv rtl/fp32_add.sv \
    rtl/dcm_emulator.sv rtl/pwm_module.sv rtl/step_timer.sv \
    rtl/dcm_emulator_system.sv tb/tb_dcm_emulator_system.sv \
    --top-module tb_dcm_emulator_system
./obj_dir/Vtb_dcm_emulator_system
```

The unit testbenches need only their own module (plus the packages, plus
`fp32_mul`/`fp32_add` for the emulator). The whole-system test runs in well
under a second. The open-loop workload takes about 6 s and the 1.5 s
closed-loop workload about 90 s.

To use other motor parameters, recompute a, beta, gamma, lambda, mu and nu
for the motor and the chosen step, encode them as float32, and override
the `dcm_emulator` parameters. Changing the step period in HIL mode only
needs `STEP_NS` on the top level.

## 8. Where this design departs from, or adds to, the original description

* **Precision.** The original text mentions double-precision types for the
  code generator. It also says that all links are 32 bits wide and all data
  is floating point, and its operator report lists 32-bit units. Its
  published simulation values are single-precision words. The design uses
  single precision.
* **Lambda.** The coefficient table gives lambda = 1.4603e-4. The published
  simulation run used 1.46e-4, which its second speed value shows. The
  table value is the default.
* **Speed equation.** Uses Im(k); see section 2.
* **Stream protocol.** Only the port names and the meaning of `_en`/`_rdy`
  are given. The single-cycle handshake, one-word output registers, eos
  behaviour and overwrite-in-HIL rule are this design's. The generated core
  also had a separate stream clock `sclk`. Here everything runs on `clk`.
* **HIL step enable.** The original connects the 1 µs timer to the core's
  enable ports. Here it is a dedicated `step_en` input.
* **Arithmetic units.** The latencies (5 and 7) and the handling of
  subnormals and NaN are choices. The latencies were picked so that the
  open-loop step takes the 32 cycles of the original estimate.
* **PWM.** Only its function is given: two opposite commands, 16 kHz, no
  dead time, written over the peripheral bus. The register map, the 16-bit
  alpha format and the period-boundary update are this design's. The bus
  protocol is reduced to a one-cycle write port.
* **Not included.** The processor, its memories, the peripheral bus, the
  FIFO links, the UART, the GPIO block, the interrupt timers and the
  interrupt controller are vendor library parts. The PI controllers are
  software. Their connection points are top-level ports.
* **Idle outputs in HIL mode.** In the default build `alpha_rdy`,
  `im_eos` and `wm_eos` are constant 0 and the alpha inputs are unused,
  because that set-up has no alpha stream.
