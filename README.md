# Standoff-tracking controller core: LGV planning, network MPC and projection

A quadrotor is asked to circle a target, which may be moving, at a fixed
horizontal distance `r_d`, a fixed height `z_d` above it and a fixed speed
`v_d`. This is standoff tracking. The controller in this repository does the
whole per-sample computation in hardware. It runs once per sampling period
(0.1 s) and produces the four rotor inputs. Its inputs are the UAV's 12-element
state and the target's position and velocity. A call has five steps:

1. **Relative range.** Measure the horizontal UAV–target distance `r(k)`.
2. **Integral module.** Correct the range command with an integral term, so
   that a steady range error left by the approximate controller is removed.
3. **Reference planning.** Integrate a guidance vector field (the Lyapunov
   guidance vector, LGV) forward over the prediction horizon to get a
   reference trajectory.
4. **Network MPC.** Evaluate a small fully connected network that was trained
   offline to imitate a model predictive controller. Its inputs are the UAV
   state and the first reference point.
5. **Projection.** Project the network's output onto the set of inputs that
   keep the pitch and roll limits and the rotor bounds.

The network is what keeps this within embedded budgets. Solving the MPC
optimisation online is too slow on a small processor. A trained network gives
nearly the same input in a fixed, small number of multiply-adds. The
projection then restores the hard constraints that the network only
approximates.

The core's top module is `standoff_mpc_core`. At its default sizes one call
takes **15 998 clock cycles**. That is 80 µs at 200 MHz, against a 100 ms
sampling period.

## Number format

Every value on a port is a signed 32-bit fixed-point number with 16 fraction
bits (Q16.16), so 1.0 is `32'h0001_0000`. Products and sums are formed at
64 bits (Q48.16) and saturated on the way back to 32 bits. The package
`smpc_pkg` holds the types, the constants and the helpers `fx_mul`, `fx_sat`,
`fx_clamp` and `fx_lrelu`. Each constant is the nearest Q16.16 value:

| Constant | Value |
|---|---|
| τ | 6554/65536 (0.1000061) |
| c1 | 0.2 |
| 1/c2 | 5.5 |
| ū | 12 |
| leaky-ReLU slope | 655/65536 |

The fixed-point format is a choice of this design. The original core was
generated by high-level synthesis from C++, and its arithmetic is not
documented. Resolution is 1.5·10⁻⁵ and the range is ±32768. Positions of tens
of metres and rotor inputs up to 12 fit comfortably.

## The guidance field and the planner (`lgv_planner`)

The heart of the reference generation is a 2-D vector field around the target.
Take `(x, y)` as the UAV position relative to the target, with `r = √(x²+y²)`.
Then

    v_L = −v_d / (r (r³ + r_d³)) · [ x (r³ − r_d³) + 2 y √(r³ r_d³),
                                     y (r³ − r_d³) − 2 x √(r³ r_d³) ]

The exponent 3 (β = 3) sets how fast the field pulls the UAV onto the circle.
Far outside the circle the field points inward. On the circle
(`r = r_d`) it is tangent, with magnitude `v_d`. The sign of the `2·√` terms
selects counter-clockwise (the default) or clockwise circling; the parameter
`CLOCKWISE` flips it.

The vertical reference is `v_z · tanh(z_d − z)`. The tanh keeps the speed
bounded. The target velocity `v_o` is added to both.

The planner starts at the UAV's current position and the target's current
position. It takes N_P + 1 = 21 Euler steps of length τ. At each step it moves
the reference point by `τ·v_ref` and the predicted target by `τ·v_o`. It stores
each new point (position and velocity) in a 21-entry buffer. Entry 0 is the
first reference point `x_ref(0|k)`, which is what the network sees. The whole
buffer can be read through `traj_idx`/`traj_out`.

One step uses each of these shared units in turn:

| Unit | Used for | Cycles |
|---|---|---|
| `fx_sqrt` | `r`, then `√(r³ r_d³)` | 33 each |
| `fx_div` | the x and y components of `v_L`, divided separately | 33 each |
| `fx_tanh` | the vertical term, started in parallel with the first square root | 54 |

The components of `v_L` are divided separately so that neither loses
resolution to a common scale factor. A step takes about 140 cycles, and a plan
2 920 cycles.

The units work as follows:

- **`fx_sqrt`** finds one result bit per cycle by the digit-by-digit method.
  It takes a 48-bit Q32.16 radicand.
- **`fx_div`** is a restoring divider. Its dividend and divisor are Q48.16. It
  saturates and flags an overflow, including division by zero.
- **`fx_tanh`** computes `e = exp(−2|x|)` as `2^(−2|x|·log₂e)`:
  - The fractional part of the exponent is a product of up to 16 constants
    `2^(−2^−i)`, one per set bit.
  - The integer part becomes a right shift.
  - `(1 − e)/(1 + e)` then goes through an `fx_div`.
  - For `|x| ≥ 8` it returns ±1.

  The error stays within 4 LSB (6·10⁻⁵).

`v_z` is not given a value in the published description. It is a parameter,
with a default of 1.0 m/s.

## Integral module (`integral_module`)

The network only approximates the MPC law, so the UAV tends to settle on a
circle slightly off `r_d`. The integral module accumulates the saturated,
scaled range error and lowers or raises the command handed to the planner:

    σ(k)    = σ(k−1) + sat((r(k) − r_d) / c2)      sat(·) clips to [−1, 1]
    r̂_d(k) = r_d − c1 σ(k)

The constants are c1 = 0.2 and c2 = 0.2/1.1, which satisfy the convergence
condition c2 < c1 < 2·c2.

The saturation bounds each correction to c1 per sample. This limits the
windup when the UAV starts far from the circle.

The module has two controls:

- `enable = 0` bypasses it, so `r̂_d = r_d`. This allows comparison with the
  uncorrected controller.
- `clear` resets σ.

`sat_hit` reports whether the last update was clipped. The division by c2 is a
multiplication by the constant 1/c2.

## The network (`dnn_engine`, `param_ram`)

The network is 18 → 100 → 100 → 4 and fully connected. Its input is
`s = (x(k), p_ref(0|k), v_ref(0|k))`: the 12 UAV states, then the reference
position and velocity. A leaky ReLU with slope 0.01 follows every layer,
including the output layer. The published text once gives the input
dimension as 16. Counting the nonzero elements of the reference point gives 18,
and 18 is what is built. `N_IN` is a parameter.

The engine has one multiply-accumulate unit and works neuron by neuron:

1. Read the neuron's bias from `param_ram`.
2. Stream the neuron's fan-in weights from `param_ram`, one per clock, and
   multiply each with the matching activation from a ping-pong buffer.
3. Accumulate the products at full 64-bit precision.
4. Round the sum, apply the activation and write the result into the other
   buffer.

The parameters are laid out layer after layer. Within a layer they go neuron
after neuron, each as the bias followed by its weights. That gives
`100·19 + 100·101 + 4·101 = 12 404` words. The offset of a layer is
`Σ fan_out·(fan_in + 1)` over the earlier layers, which is
`dnn_layer_words` in the package. The parameters are written while the core
is idle, through `pw_en`/`pw_addr`/`pw_data` on the top.

The weights come from offline training and are not part of the hardware. The
testbenches load random ones.

Latency is `Σ fan_out·(fan_in + 4) + 1` = 13 017 cycles. That is about 80 %
of a call. Sharing one multiplier is the main departure from the published
implementation, which used 121 DSP slices and finished a call in 0.126 ms
(25 200 cycles). The single MAC keeps the design small and easy to follow, and
it is already faster than that figure. To widen it, split `param_ram` into
banks and give each bank its own accumulator.

## Projection (`projection`)

Pitch and roll must stay within ±c at the next sample. Linearised around the
current state x(k), this becomes half-spaces on the rotor inputs:

    g_j · u ≤ b_j,    g_j = C_j B_k,   b_j = c − C_j A_k x(k)

In addition, each rotor input is boxed, `0 ≤ u_i ≤ ū = 12`. The core does not
contain the quadrotor model, so the rows `hs_g` and bounds `hs_b` are inputs.
Four half-spaces are the default, for the two limits on each of pitch and
roll.

One pass visits the half-spaces in order:

- **Violated half-space.** The input is moved onto its boundary with the
  closed-form step `u ← u + (b_j − g_j·u)/‖g_j‖² · g_j`, using one divider.
- **Satisfied half-space.** The input is left alone, as is one with an
  all-zero row, which cannot be fixed by moving `u`.
- **End of the pass.** The input is clipped to the box.

Three passes are made. If a half-space is still violated by more than
`TOL` = 64 LSB (about 0.001), the supplied feasible backup point `u_backup`
is output instead.

The status outputs are:

- `proj_steps`: the number of corrections.
- `proj_clipped`: the box was active.
- `proj_backup`: the backup point was used.

The worst case is 443 cycles, within the 6.17 µs (1234 cycles) reported for
the published projection.

## Core sequencing and handshake (`standoff_mpc_core`)

The stages run strictly one after another, with a start/busy/done pulse
handshake between them. The control ports follow the usual block-level
protocol of HLS cores:

- **Starting a call.** The core is idle when `ap_idle` is high. While it is
  idle, `ap_start` starts a call and all inputs are sampled on that cycle, so
  the master may change them afterwards.
- **Ending a call.** When the rotor inputs are in `out`, `ap_done` and
  `ap_ready` are high for one cycle. `out` then holds until the next call
  ends.
- **Holding `ap_start`.** A master that holds `ap_start` until `ap_ready`
  gets exactly one call. `ap_start` is ignored while the core is busy.

The data ports keep the names of the published core. `tp[0..5]` are the target
position and velocity (TP1..TP6), `xk[0..11]` is the UAV state (xk1..xk12),
`rd` and `ud` are the range and speed commands, and `out[0..3]` are the rotor
inputs (out1..out4).

Added ports:

- `ap_done`, which is not shown among the published ports.
- `zd`, the height command, which the planner needs but has no published port.
- The projection's rows, bounds and backup point, because the linearisation
  is outside.
- The parameter load port.
- The trajectory read-out.
- The status outputs `r_k`, `rd_hat`, `im_sat`, `proj_*`.

The horizontal range is computed inside the core from `xk` and `tp`. The
published block diagram draws it next to the FPGA, but the published port
list has no range input.

Cycle counts measured at the default sizes, from the `ap_start` edge:

| stage | cycles |
|---|---|
| input sampling and range (sqrt) | 36 |
| integral module update, planner start | 3 |
| planner, 21 points | 2 920 |
| network 18-100-100-4 | 13 019 |
| projection with no correction needed | 19 |
| `ap_done` | 1 |
| **total** | **15 998** |

Each half-space correction adds about 35 cycles to the projection. The worst
case is 443 cycles. The backup case in the end-to-end test takes 124 cycles.

Assertions in the top check the handshake rules: a start while idle always
leaves idle, and no stage is started while busy.

## What the core does not contain

- **The quadrotor linearisation.** The matrices A_k, B_k and the constraint
  matrix C depend on model constants that are not published. So G and b are
  computed outside and passed in.
- **The trained weights.** These must be loaded.
- **The rest of the hardware-in-the-loop setup.** The processor, the AXI
  interconnect and the serial link that fed the core are vendor parts, and
  are left out.
- **The obstacle-avoidance guidance.** This is the LGV combined with an
  inverse convergence vector from other work, and it is not included.
- **Matching resource numbers.** The published figures were 57 BRAM, 121 DSP,
  27.8k FF and 23.2k LUT. With its single MAC, this design will use far fewer
  DSPs.

## Files

| file (in `rtl` unless noted) | content |
|---|---|
| `smpc_pkg.sv` | types, constants, fixed-point helpers |
| `fx_sqrt.sv`, `fx_div.sv`, `fx_tanh.sv` | sequential arithmetic units |
| `relative_range.sv` | horizontal range |
| `integral_module.sv` | range-command correction |
| `lgv_planner.sv` | reference trajectory |
| `param_ram.sv` | network parameter memory |
| `dnn_engine.sv` | network evaluation |
| `projection.sv` | constraint projection |
| `standoff_mpc_core.sv` | top |
| `tb_ref_pkg.sv` (in `tb`) | double-precision reference models used by the testbenches |
| `tb_<block>.sv` (in `tb`) | one self-checking testbench per block |

## Simulation

Every testbench compares the RTL against an independent floating-point model
from `tb_ref_pkg`. It prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog if the design hangs. For example:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/smpc_pkg.sv tb/tb_ref_pkg.sv tb/tb_standoff_mpc_core.sv \
        --top-module tb_standoff_mpc_core -o sim
    ./obj_dir/sim

The remaining `rtl/` files are found through `-Irtl`. The same command works
for every `tb_<block>`. The testbenches use `$urandom`, with no constraint
solver.

**`tb_standoff_mpc_core`** runs the core at its default sizes with no
parameter overrides. It loads random weights and makes 15 calls:

- The four published stationary-target starting points, (±5, ±5) m.
- States near the circle.
- A moving target, with the integral module off for three calls.
- A call whose half-spaces cannot be met, so the backup point is taken.

Each call is checked for:

- The four rotor inputs.
- The range and the corrected command.
- The first and last planned points.
- A latency below 25 200 cycles.

It also counts how often each mechanism occurred and fails if one never did:

- integral accumulation
- integral saturation
- integral bypass
- half-space correction
- box clipping
- backup point
- parameter load
- trajectory read-out
- start ignored while busy

It runs in about 15 s.

The block testbenches also cover other sizes:

- The planner in both directions of rotation.
- A 5-7-7-7-3 network as well as the default one.
- The projection against random polytopes, including infeasible ones.
- The integral module in the loop `r(k+1) = r̂_d(k) + b` for five constant
  biases. Each step is checked against `δ(k+1) = δ(k) − c1·sat(δ(k)/c2)`,
  and the steady-state range error must end below 10⁻³.

The tolerances are a few LSB for the arithmetic units and 10⁻³ to 10⁻² for
the multi-stage blocks, set by the Q16.16 rounding.

## Changing it

- **Network size.** `N_H`, `N_HID` and `N_IN` on the top resize the memory
  and the buffers. A different trained network only needs its weights written
  in the layout above.
- **Horizon.** `N_P` sets the planner horizon and the buffer size.
- **Constraints.** `NH` is the number of half-spaces and `ITER` the number of
  projection passes.
- **Constants.** c1, 1/c2, τ, v_z and ū are parameters of the blocks that use
  them, with defaults taken from the package.
