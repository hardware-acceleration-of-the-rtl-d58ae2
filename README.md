# A four-cycle Gipps car-following accelerator

Microscopic traffic simulators update the speed of every vehicle once per
time step. In the Gipps car-following model, the acceleration branch of that
update is

    Va(n, t+T) = V + 2.5 · a · T · (1 − V/V*) · sqrt(0.025 + V/V*)

where V is the vehicle's current speed, V* its desired speed, a its maximum
acceleration and T the reaction time, which equals the simulation step. A
vehicle well below its desired speed gains close to 2.5·a·T·sqrt(0.025 + V/V*).
The gain falls to zero as V approaches V*.

This RTL computes that update in hardware. One processing element takes the
four operands and returns the new speed four clock cycles later. It uses one
combinational array multiplier and one combinational array divider, and it
takes the square root on the divider by two Babylonian iterations. The
intended use is a single instruction or an add-on card that replaces the
few lines of simulator code that evaluate this equation. At the 250 MHz
that such a design reaches in a 45 nm standard-cell library, one update takes
16 ns.

## Number format

Every value is an unsigned 14-bit fixed-point word with 8 integer bits and 6
fraction bits (Q8.6). The range is 0 to 255.984 and the step is 1/64 = 0.0156.
Eight integer bits hold any road speed below 256 km/h. The same format is used
for accelerations, time steps, the ratio V/V*, the square root and every
intermediate product.

- **Rounding.** Every multiply and divide truncates the bits it drops.
- **Saturation.** Every result that would exceed 255.984 saturates to all
  ones. A sticky `sat` output reports saturation, or division by zero, in the
  evaluation that just finished.
- **The constant 0.025.** It has no exact Q8.6 code. It is rounded to the
  nearest code, 2/64 = 0.03125 (`gipps_pkg::FIX_C0025`).
- **The factor 2.5.** It is applied as `2m + m/2`, a shift and an add, not a
  multiply.

Because the words are unsigned, the term `1 − V/V*` cannot go negative. It is
clamped at zero, so a vehicle at or above its desired speed keeps its speed.
The full Gipps model handles that case with a second, braking equation, which
this design does not include.

## The four cycles

`gipps_accel` holds two working registers besides the operand registers:
`m` carries the product chain and `x` carries the square-root estimate. A
third register, `r`, holds V/V*. The control unit `gipps_ctrl` steps through
four cycles, and each cycle uses each arithmetic unit at most once:

| cycle | divider (in `sqrt_unit`)              | multiplier        | small adders             |
|-------|---------------------------------------|-------------------|--------------------------|
| C1    | r = V / V*                            | m = a · T         |                          |
| C2    | x = (x0 + S/x0) / 2, with S = 2/64 + r | m = m · (1 − r)   | S, 1 − r (clamped)       |
| C3    | x = (x + S/x) / 2                     |                   | m = 2m + m/2             |
| C4    |                                       | m · x             | Va = V + m·x (saturating) |

The schedule is this design's own. The four-cycle total matches the reported
design.

**Handshake.** `start` is accepted when `ready` is high. The edge that
accepts it also loads the four operand registers. The design then runs C1 to
C4 and raises `done` for one cycle. The rising edge of `done` comes exactly
four edges after the accepting edge, and `v_next` is valid from that cycle
until the next result replaces it. A new `start` may be given in the same
cycle as `done`, so back-to-back updates occur every 4 + 1 cycles: one cycle
to load and four to compute. Evaluations do not overlap.

A `start` while busy is a protocol error. An assertion in `gipps_ctrl` flags
it, and the request is ignored. Reset is asynchronous and active low.

## Square root on the divider

The square root is the part that is hardest to see from the equation. The
radicand is S = 0.03125 + V/V*, which lies between 0.03 and about 1.03 when
V ≤ V*. The root uses the Babylonian iteration `x' = (x + S/x) / 2`. Each
step needs one division, so the divider that computes V/V* in C1 is reused
in C2 and C3. That is why `sqrt_unit` wraps the divider: a mux selects either
V and V* or S and the current estimate. The only extra hardware is
`sqrt_logic`: a starting estimate, one 15-bit adder and a shift.

**Starting estimate.** Let p be the index of the leading 1 of S. Then S lies
in [2^(p−6), 2^(p−5)), so its root has about (p+6)/2 bits to the right of
its own leading 1. Let h = floor((p+6)/2).

- If p+6 is even, x0 = 2^h codes.
- If p+6 is odd, x0 = 1.5 · 2^h codes, which approximates √2 · 2^h.

This puts x0 within a factor of 1.5 of the true root. The Babylonian step
roughly squares the relative error, so two steps bring it under 0.2 %.
`tb_sqrt_unit` checks every one of the 16384 radicands: after two steps the
root is within 0.3 % + 2 codes of the exact value. The evaluation therefore
always runs exactly two iterations and never tests for convergence.

## The array units

**`array_multiplier`.** Fourteen rows of 14-bit ripple adders, one row per
multiplier bit. Each row adds the partial product `a & {14{b[i]}}` to the
upper 14 bits of the previous row's sum and retires one product bit. Row 0
adds to zero and synthesises away. The Q16.12 product is cut to bits
[19:6]. If any bit above that is set, the result saturates.

**`array_divider`.** A restoring divider for `q = (n·64)/d`. In general that
quotient has 20 bits. Its top six bits are zero exactly when
`n[13:8] < d`, so that comparison is the overflow test. It also makes
`n[13:8]` the starting remainder. Fourteen rows follow. Each shifts in one
bit of `{n[7:0], 6'b0}`, subtracts d with a 15-bit subtracter, keeps the
difference when it did not borrow, and emits one quotient bit. Overflow,
including d = 0, saturates the quotient.

Both units are fully combinational. In the reported synthesis they are most
of the area: about 2000 µm² for the multiplier and 3000 µm² for the divider,
out of 7016 µm². Pipelined or multi-cycle versions would raise the clock and
shrink the area. They are not built here.

## Accuracy

Six fraction bits limit accuracy at low speeds. When V/V* is small, the
truncation of V/V* to 1/64 is large next to S itself, and the square root
magnifies that error. Over 3000 random updates with a from 0.5 to 4,
T from 0.5 to 1.5 and V* up to 200, the worst difference from the exact
equation was 0.55 speed units. That case was a vehicle almost at rest
(V = 3.9, V* = 138), whose exact gain in the step is 3.4 units. The end-to-end
testbench holds every result to a first-order bound built from one truncation
of each intermediate value. The error against the exact equation is therefore
much larger than the ±0.008 that the format's resolution alone suggests.

## Files

Files under `rtl/`:

| file | contents |
|------|----------|
| `gipps_pkg.sv` | word width, fraction bits, constants, the `step_t` cycle enum, saturating add |
| `array_multiplier.sv` | combinational Q8.6 array multiplier |
| `array_divider.sv` | combinational Q8.6 restoring array divider |
| `sqrt_logic.sv` | leading-one starting estimate and Babylonian averaging |
| `sqrt_unit.sv` | divider shared between plain division and square-root steps |
| `gipps_ctrl.sv` | IDLE/C1..C4 sequencer with start/ready/done and handshake assertions |
| `gipps_accel.sv` | the processing element (top): operand registers, datapath, control |

Top-level ports of `gipps_accel`: `clk`, `rst_n`, `start`; the four 14-bit
operands `accel`, `tstep`, `v_des` and `v_cur`; and the outputs `ready`,
`done`, `v_next` (14 bits) and `sat`. The word width `W` and fraction bits
`FRAC` are parameters of the arithmetic units, and the package sets them to
14 and 6.

## Testbenches

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M`
and has a cycle-count watchdog. `tb/gipps_ref_pkg.sv` holds the reference
models. They use the simulator's own `*` and `/`, plus a real-valued version
of the equation.

- `tb_array_multiplier`: corner values and 25 000 random pairs.
- `tb_array_divider`: corners, the edge of the quotient range, division by
  zero, and 40 000 random pairs.
- `tb_sqrt_logic`: the estimate for all 16384 radicands, its distance from
  the true root, and the averaging step.
- `tb_sqrt_unit`: divide mode, and two-step roots for all radicands, both bit
  for bit and against the exact root.
- `tb_gipps_ctrl`: the state sequence, the 4-edge latency, back-to-back and
  gapped starts, and reset during an evaluation.
- `tb_gipps_accel`: the full-size, end-to-end test.
  - It runs about 8000 updates and checks each one bit for bit against the
    integer model, against the exact equation within a first-order rounding
    bound, and for the four-edge latency.
  - It then runs a six-vehicle platoon from rest, feeding each result back as
    the next speed, until every vehicle is within one unit of its desired
    speed.
  - It counts each mechanism and fails if one never occurs: back-to-back
    starts, gapped starts, the V ≥ V* clamp, V* = 0, saturation, and
    even and odd starting-estimate exponents.

To run one with Verilator from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_gipps_accel \
        rtl/gipps_pkg.sv rtl/array_multiplier.sv rtl/array_divider.sv \
        rtl/sqrt_logic.sv rtl/sqrt_unit.sv rtl/gipps_ctrl.sv rtl/gipps_accel.sv \
        tb/gipps_ref_pkg.sv tb/tb_gipps_accel.sv
    ./obj_dir/Vtb_gipps_accel

For another testbench, change the top module and the last file. The same
file list works for every testbench; a unit testbench needs only
`gipps_pkg.sv`, its unit's files and `tb/gipps_ref_pkg.sv`.

## Departures and limits

- **The radicand.** The published description of this accelerator prints
  the root as `sqrt(0.025 − V/V*)`. That is negative for nearly every
  speed. This RTL uses the standard Gipps form, `sqrt(0.025 + V/V*)`.
- **Constants and the V ≥ V* case.** 0.025 is replaced by 2/64, and
  `1 − V/V*` is clamped at zero (see "Number format").
- **Rounding and overflow.** The truncation, saturation and divide-by-zero
  behaviour, the exact starting-estimate rule, the four-cycle schedule and
  the handshake are this design's own choices.
- **Only the acceleration branch.** The braking equation of the full Gipps
  model, and the final minimum of the two speeds, are not included.
- **One processing element.** A chip with several elements, one per vehicle,
  working in parallel (nine in the motivating picture) would be nine
  independent `gipps_accel` instances. How they would share a host interface
  is not defined, so no array top is provided.
- **No host link.** Neither a CPU-instruction integration nor a PCI Express
  interface is included. The operand and result ports are the boundary.
- **Timing, area and power are not verified here.** The 250 MHz, 7016 µm²
  and 2.3 mW figures belong to the original 45 nm implementation.
