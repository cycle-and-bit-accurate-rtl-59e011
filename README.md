# Fixed-point chaotic masking link with an edge-counting bit detector

Two copies of a three-state chaotic system run at the two ends of a link. The
transmitter (the master) runs freely. The receiver (the slave) is pulled onto
the transmitter's trajectory by an adaptive controller that sees the three
synchronisation errors. Information is hidden by adding it to the
transmitter's z state before sending. Once the two ends are synchronised,
any extra step in the received z signal shows up as a step in the error
e3 = sigma_z − r_z, and the receiver recovers the information from it.

The adaptive controller undoes such a step within a few hundred samples: it
treats the information as a disturbance. So for a binary signal the receiver
does not threshold e3 itself. Instead it looks for the *moment* e3 jumps,
counts the jumps, and takes the parity of the count as the bit.

Everything is cycle- and bit-accurate fixed point:

- 16-bit signals.
- One Euler step of 0.001 per clock.
- A 450 MHz system clock in the reference configuration.

This RTL covers every part of that system whose working is specified:

- the integrators and the state registers of transmitter and receiver, with
  their initial conditions;
- the modulator;
- the error unit;
- the complete binary detector;
- the 16-level bit view of the signals.

Three parts are not in the RTL:

- the chaotic vector field;
- the adaptive control law;
- the smoothing filter used for non-binary information.

Their coefficients and structure are not available, so they connect through
ports of the top module. How to close those loops is explained below.

## Number format

| quantity | representation |
|---|---|
| any signal | 16-bit two's complement integer, value × 3107 (scaling factor s_f = 3107, so 1.0 ↦ 3107) |
| rounding to 16 bits | convergent (round half to even), i.e. unbiased |
| overflow | saturation at −32768 / +32767 everywhere |
| transmitter start w(0) | (1032, −3107, 0) ≈ (0.33, −1, 0) |
| receiver start σ(0) | (0, −4660, 1553) ≈ (0, −1.5, 0.5) |
| controller gains (for the external controller) | k1 = 2·s_f, k2 = s_f, k3 = 3·s_f (`chaos_pkg::K1..K3`) |
| edge threshold | a_threshold = 0.5 → \|Δe3\| ≥ 1554 LSB |

The signals are also shown as 16 separate bit lines, b15..b0 (`digitizer`,
and the `w_bits`/`e_bits` outputs of the top). This is **sign-magnitude with
an inverted sign bit**:

- b15 is 1 for a value ≥ 0 and 0 for a negative value.
- b14..b0 hold |v|.

Reference points: 1032 → `1000010000001000`, −3107 → `0000110000100011` and
0 → `1000000000000000`. Neither two's complement nor offset binary gives the
second of these, so the format is not either of those. −32768 is shown as
magnitude 32767.

## Signal flow

```
            f_tx = f(w)  (external)                 f_rx = f(sigma), u = control(e)  (external)
                 |                                          |        |
                 v                                          v        v
        +-------------------+    w.z   +-----------+     +----------------------+
        | chaos_transmitter |--------->| modulator |     |    chaos_receiver    |
        | 3 x euler_integr. |  w.x,w.y |  wz + m   |     | 3 x euler_integrator |
        +-------------------+----+     +-----------+     |  integrand f + u     |
                 ^ info/info_valid   |      | s_z         +----------------------+
                                     v      v                       | sigma
                                   s_tx = (wx, wy, wz+m) ==channel==> r_rx
                                                                    v
                                                          +-------------------+
                                                          | error_unit        |
                                                          | e = sigma - r_rx  |---> e (to controller)
                                                          +-------------------+
                                                                    | e3 = e.z
                                                                    v
                               +-----+   +-----------+   +---------------+   +-----------+
                               |  D  |-->|  F1       |-->| E_c + M       |-->|  F2       |--> recovered
                               | 4 s |   | |Δ|>=1554 |   | edge counter  |   | even -> 1 |
                               +-----+   +-----------+   +---------------+   +-----------+
                                          binary_detector
```

## The Euler integrator

`euler_integrator` is the building block of both chaotic systems. It
contains three parts:

- a constant multiplier by the step 0.001;
- an adder whose other operand is the register output;
- a register whose output is both the state and the fed-back operand.

This gives x[n+1] = x[n] + 0.001·f[n].

The multiplier constant is held as round(0.001·2^20) = 1049, which makes the
step 0.04 % too large. The register keeps 20 fraction bits under the 16-bit
state, for 36 bits in all. Without them, any derivative with |0.001·f| < 0.5
LSB (|f| < 500 LSB, about 0.16 in real units) would round away and the
trajectory would stall. The state output is the register rounded half-to-even
to 16 bits.

The step fires on clocks with `en` high. In the reference configuration `en`
is tied high and the step rate is the clock rate. The state changes one clock
after its derivative is presented. So the vector field outside must be
combinational from the present state, and then the loop is exactly
forward Euler.

## Transmitter, modulation and receiver

- **`chaos_transmitter`** holds three integrators, started at w(0).
- **`modulator`** holds the most recent information sample in a register.
  The register loads on `info_valid`, which sets the input sampling rate
  independently of the system rate: every clock for 450 MHz sampling, every
  100th clock for 4.5 MHz. The transmitted z signal is wz + m, saturated.
  x and y are sent unchanged. Additive modulation is this design's reading;
  the sources only say that the information modulates wz. It matches the
  observed behaviour: a 0→1 step of the information gives an error pulse of
  height 1.0.
  - A binary bit is sent as m = 0 or m = 3107 (1.0).
  - A sine of amplitude 0.5 peaks at 1553.
- **`chaos_receiver`** holds three integrators started at σ(0). Each
  integrates f(σ) + u, with the sum saturated. The receiver's coefficients
  are taken to equal the transmitter's.
- **`error_unit`** forms e = σ − r for all three states, saturated to 16
  bits. The sign convention makes e3 dip when the information rises.

## The binary detector (`binary_detector`)

This is the part with the least obvious logic. After synchronisation, the
receiver's z tracks the transmitter's z with a small error. The chaotic and
control dynamics change e3 by only a few LSB per sample, because the Euler
step is 0.001. A bit transition changes r_z by 3107 LSB in a single sample.
So e3 jumps by about 1.0 in one sample, and then the controller pulls it
back within a few hundred samples. Only that first jump carries the
information. Four stages use it:

1. **D (`delay_line`)**: delays e3 by DEPTH = 4 samples. It is there to
   give the free transmitter and the controlled receiver time to
   synchronise. Its length is not specified and 4 is this design's choice.
   A valid bit travels with each sample, so the reset contents of the delay
   are never compared as data.
2. **F1 (`edge_detector`)**: keeps the previous sample m and compares it
   with the current sample n. It outputs 1 when |m − n| ≥ 1554, which is
   a_threshold = 0.5 at the scale 3107. The result is a pulse one sample
   wide at each transition.
3. **E_c with M (`edge_counter`)**: an adder of the F1 pulse and its own
   previous output, held in the one-sample memory M. This gives a running
   count of the transitions. The memory breaks what would otherwise be a
   combinational loop. The counter is 16 bits wide and wraps.
4. **F2 (`parity_decision`)**: outputs 1 for an even count and 0 for an odd
   count.

So the recovered bit toggles at every detected transition. Its absolute
polarity is set by the count at start. With the counter cleared at reset it
starts at 1, so an information stream that starts at 0 comes out inverted.
Recordings of the reference system show the recovered bit equal to the
information from the start. That implies an odd count at start-up there,
perhaps from one extra edge during start-up. If your link needs
the other polarity, set `edge_counter`'s `INIT` to 1.

The F2 rule is followed as specified, and the consequence is exact:

- The parity detector has no way to resynchronise. One missed or spurious
  edge inverts every later bit, until another error flips it back.
- This is why the bit error rate over a noisy channel jumps from 0 to about
  0.5 once noise makes sample-to-sample steps reach the threshold, instead
  of degrading gradually.

**Timing.** A step of e3 reaches F1 DEPTH enabled clocks later. F1, E_c and
F2 are combinational, so `edge_o`, `edge_count` and `recovered` change on
that clock. Counted from the clock on which `info_valid` loads a changed bit
into the modulator, the recovered bit toggles exactly 4 clocks later. At 450
samples per bit (1 Mbit/s at 450 MHz), the detector adds less than 1 % of a
bit period.

## What the ports stand for

`chaos_comm_top` leaves three loops open.

| external part | drive | from |
|---|---|---|
| chaotic vector field, transmitter | `f_tx` = f(`w`) | combinational from `w` |
| chaotic vector field, receiver | `f_rx` = f(`sigma`) | combinational from `sigma` |
| adaptive controller | `u` | combinational from `e` (and its own adaptation state) |
| channel | `r_rx` | `s_tx`, plus noise if wanted |

The controller is meant to use the gains k1 = 6214, k2 = 3107 and k3 = 9321,
which are in `chaos_pkg`. Its control and adaptation laws, and the vector
field's equations, are not available. The testbenches therefore use stand-ins:

- the linear field f(v) = (−v_y, v_x, v_x − v_z) for both ends;
- the proportional control u = −8·e.

The stand-ins exercise every path and give error pulses of the expected
shape: a jump of 1.0 decaying with a time constant of about 125 samples.
They are **not** the chaotic system. So the synchronisation transient,
the recovered sine shapes and the BER curve of the reference system are not
reproduced, and figures from the benches apply to the stand-in loop only.

For a sine or other higher-resolution information signal, the reference
system recovers the signal by filtering or exponential smoothing of the
error. Which filter it uses is not known, so none is included; `e` is on
the top's ports for one.

## Where this design chooses for itself

- 20 fraction bits in the integrator register, and the step held as 1049/2^20.
- Saturation instead of wrap-around in every adder.
- Asynchronous active-low reset everywhere.
- A clock enable `en` on every register; it is tied high at the full rate.
- Additive modulation, and the hold register for the input sampling rate.
- The sign of the errors (receiver minus received).
- Delay D = 4 samples, plus the valid bit that keeps start-up values out of F1.
- The edge counter: 16 bits, cleared to 0.
- Sign-magnitude saturation of −32768 in the bit view.

All other numbers (16 bits, s_f = 3107, step 0.001, both initial
conditions, the gains, a_threshold = 0.5, and the F1 and F2 rules) are the
reference system's own.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_euler_integrator` | reset value, hold with en = 0, no f→x combinational path, 1000 steps of f = 1000 move x by exactly 1000 (0.001 per step), half-to-even rounding on exact halves, both saturation limits, 20,000 random steps against a real-arithmetic reference |
| `tb_chaos_transmitter`, `tb_chaos_receiver` | initial conditions; closed-loop Euler trajectories, or random f and u, against a real-arithmetic reference; saturation of f + u |
| `tb_modulator` | sum and saturation; the hold register changes only on `info_valid`; hold at a 1-in-100 input rate |
| `tb_error_unit` | differences and both saturation limits |
| `tb_delay_line`, `tb_edge_detector`, `tb_edge_counter`, `tb_parity_decision` | each detector stage against its rule. F1 is checked at 1553 (no edge) and 1554 (edge) in both directions, on a slow ramp (no edge), and on invalid samples |
| `tb_digitizer` | the three reference bit patterns and all 65,536 inputs |
| `tb_binary_detector` | a synthetic e3 (decaying ±1.0 pulses on a slow sine); toggle position, count and level on every sample, at 4-sample latency |
| `tb_chaos_comm_top` | the whole system at its default parameters, 40 bits at 450 samples per bit. Checks the reset bit patterns, synchronisation within 4 unmodulated bits, exactly one toggle per transition at 4 clocks latency, mid-bit level and count, and the digitised views. It counts and requires each mechanism (synchronisation, edges, rising and falling recovered bit, sample loads, both signs) |
| `tb_sine_workloads` | sine of amplitude 0.5 in four cases: 16-bit at 4.5 MHz input rate, 16-bit at 450 MHz, 8-bit (Q1.6) at 450 MHz, and 25 kHz. Checks that the transmitted z = wz + held sample on every clock and that the detector marks no false edge. With the stand-in loop it also checks that coarser sampling and coarser resolution raise the peak error |
| `tb_noisy_channel` | Gaussian noise of 0 to 900 LSB on all three transmitted signals, 60 bits per level. No bit errors up to 200 LSB; BER about 0.5 from 400 LSB, the all-or-nothing behaviour of the parity detector |

Each of the twelve module testbenches has also been run against a copy of
its module with one deliberate bug, and every one of them failed. Examples of
the bugs: truncation instead of rounding, '>' instead of '>=' in F1, D one
stage short, a wrong error sign, F1 bypassing D.

Simulating with Verilator, for example the end-to-end bench:

```
verilator --binary --timing --assert -Irtl rtl/chaos_pkg.sv \
  rtl/euler_integrator.sv rtl/chaos_transmitter.sv rtl/chaos_receiver.sv \
  rtl/modulator.sv rtl/error_unit.sv rtl/delay_line.sv rtl/edge_detector.sv \
  rtl/edge_counter.sv rtl/parity_decision.sv rtl/binary_detector.sv \
  rtl/digitizer.sv rtl/chaos_comm_top.sv tb/tb_chaos_comm_top.sv \
  --top-module tb_chaos_comm_top -o sim
./obj_dir/sim
```

Any other bench builds the same way with its own top module, and every bench
finishes in seconds. The package `chaos_pkg.sv` must come first.

After coarse synthesis the whole system is about 260 word-level cells and
333 flip-flop bits:

- six 36-bit integrator registers;
- four 16-bit delay stages;
- the previous-sample register;
- the 16-bit counter;
- the information hold register.

## Files

- `rtl/chaos_pkg.sv`: sample and state types, constants, saturation and
  bit-view functions.
- `rtl/euler_integrator.sv`, `rtl/chaos_transmitter.sv`,
  `rtl/chaos_receiver.sv`: the two chaotic systems' state.
- `rtl/modulator.sv`, `rtl/error_unit.sv`: modulation and error formation.
- `rtl/delay_line.sv`, `rtl/edge_detector.sv`, `rtl/edge_counter.sv`,
  `rtl/parity_decision.sv`, `rtl/binary_detector.sv`: the binary detector.
- `rtl/digitizer.sv`: the 16-level bit view.
- `rtl/chaos_comm_top.sv`: the system.
- `tb/`: the testbenches listed above.
