# Corki TS-CTC accelerator

A robot arm driven by a vision-language model usually receives one action
per camera frame, so the slow model inference, the network round trip and
the control computation all sit on the critical path of every frame. The
Corki approach has the model predict a short *trajectory* instead: a cubic
polynomial per task-space coordinate covering several control steps. The
robot then has to turn that trajectory into motor torques, at a high rate
and on its own, for as long as the trajectory lasts. This RTL is the
hardware that does that conversion. It implements **task-space computed
torque control** (TS-CTC) for a 7-joint arm with the kinematics of a
Franka Emika Panda:

    tau = J(q)^T [ Mx(q) (xdd_d + Kp e + Kv edot) + hx(q, qd) ],   e = x_d - x

where `x` is the end-effector position, `J` the 3x7 position Jacobian,
`Mx = (J M^-1 J^T)^-1` the task-space mass matrix, `M` the joint-space
mass matrix and `hx` the task-space bias force (Coriolis, centrifugal and
gravity terms seen at the end effector).

Two ideas make the hardware small and fast:

1. **Compute shared things once.** A software TS-CTC calls forward
   kinematics, Jacobian, mass-matrix and bias-force routines that each redo
   the same link-by-link kinematics. Here a single forward pass over the
   links produces every link pose; the Jacobian, `M`, the end-effector
   velocity, `Jdot*qd` and the bias torques are all derived from those
   poses and from one Newton-Euler sweep.
2. **Skip work when the arm has hardly moved.** Control runs far faster
   than the arm's configuration changes. An approximate-computation unit
   (ACE) estimates, from how far each joint moved since a matrix was last
   computed, whether recomputing it is worth it, and otherwise lets the
   previous value stand.

## Data flow

```
             host writes                          trajectory coeffs, t
                 |                                        |
          +--------------+   commit   +-------------------v--+
          | input buffer |----------->| trajectory evaluator |--> x_d, xd_d, xdd_d
          +--------------+            +----------------------+
             | theta, qd
     +-------v----+ upd_pose/upd_mass
     |  ACE unit  |------------------+
     +------------+                  |
             |                       v
     +-------v---------------------------+  link records (one per cycle)
     | pose unit (CORDIC, DH, Jacobian)  |--FIFO--> velocity unit --FIFO-->
     +-----------------------------------+          acceleration unit --FIFO-->
        | z_i, p_i, J, J^T                          force unit --line buffer (reversed)-->
        v                                           torque unit --> h, xdot, Jdot*qd
  task-space mass matrix unit --> Mx, J M^-1
        |                               |
        +-------> bias force unit <-----+  hx = Mx (J M^-1 h - Jdot*qd)
                         |
                  joint torque unit  tau = J^T [Mx (xdd_d + Kp e + Kv edot) + hx]
                         |
                   output buffer --> motor drivers
```

A fixed state machine (the *micro controller*) sequences a control cycle:
commit the inputs, ask the ACE unit, start the trajectory evaluator, run
the pose unit, start the mass-matrix unit if needed, wait for the torque,
trajectory and mass results, then run the bias-force and joint-torque
stages and write the output buffer.

### The link dataflow (pose, velocity, acceleration, force, torque)

The pose unit walks the modified Denavit-Hartenberg chain from the base:
for joint `i` a CORDIC (16 iterations) gives `cos`/`sin` of `theta_i`, the
twist `alpha_{i-1}` (only 0 and +/-90 degrees occur on this arm) is a
signed permutation of the frame axes, and the frame origin is advanced by
`a_{i-1}` and `d_i`. As soon as link `i`'s axis `z_i` and vector
`r_i = p_{i+1} - p_i` are known, a record `{i, z_i, r_i}` is pushed to the
velocity unit, so the downstream stages work on link `i` while the pose
unit is still computing link `i+1`.

The following units are each a one-record-per-cycle recursion of the
Newton-Euler equations for point masses, with zero joint acceleration
and gravity modelled as an upward acceleration of the base:

| unit | recursion (base to tip unless noted) |
|---|---|
| velocity | `w_i = w_{i-1} + z_i qd_i`, `v_{i+1} = v_i + w_i x r_i`; at the tip `xdot = v_8` |
| acceleration | `al_i = al_{i-1} + w_{i-1} x (z_i qd_i)`, `a_{i+1} = a_i + al_i x r_i + w_i x (w_i x r_i)`, `a_1 = (0,0,g)`; at the tip `Jdot*qd = a_8 - a_1` |
| force | `F_i = m_i a_{i+1}` (link mass at the far end of the link) |
| line buffer | collects the seven force records and returns them in reverse order |
| torque (tip to base) | `f_i = F_i + f_{i+1}`, `n_i = n_{i+1} + r_i x f_i`, `h_i = z_i . n_i` |

With zero joint acceleration, this sweep gives exactly
`h = C(q, qd) qd + g(q)`. The same sweep also gives the end-effector
velocity and `Jdot*qd`, which the bias-force formula needs. The units pass
records through valid/ready handshakes. The FIFOs between them are
`FIFO_DEPTH` (4) deep and take the struct type as a parameter.

While the records stream, the pose unit forms the Jacobian one column per
cycle, `J[:, j] = z_j x (p_8 - p_j)`, and stores it both as rows (`jac`)
and as columns (`jac_t`). The two copies feed the units that read `J` and
`J^T` directly, with no transpose step.

### Task-space mass matrix

This is the most expensive part, and it is written as a small sequential
matrix engine. Because the links are point masses,

    M = diag(armature) + sum_i m_i Jv_i^T Jv_i,
    Jv_i[:, j] = z_j x (p_{i+1} - p_j)  for j <= i, else 0

The unit accumulates `M` in the left half of a 7x14 tableau with the
identity on the right. It then runs Gauss-Jordan elimination without
pivoting, which is safe because `M` is symmetric positive definite. Each
pivot row is scaled by a reciprocal from a sequential restoring divider
(48 cycles), and the elimination clears one row per cycle. That gives
`M^-1`. The unit then forms `J M^-1` and `Lambda = J M^-1 J^T`, and
inverts the 3x3 `Lambda` on the same tableau and divider to get `Mx`. It
keeps `Mx` and `J M^-1` until the next run.

The mass-matrix unit only starts once the pose unit has finished, and then
runs alongside the velocity-to-torque dataflow.

### Approximate computation (ACE)

For each of the two reusable results there is a reference joint vector:
the angles at which that result was last computed. The unit forms

    p = min(1, sum_i w_i |theta_i - theta_ref_i|)

and asks for a recompute when `p > 0.4` (the 40 % threshold). The weights
differ by matrix:

| joint | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|
| mass matrix `W_MASS` | 0.05 | 1.5 | 1.5 | 1.0 | 0.2 | 0.2 | 0.05 |
| poses / Jacobian `W_POSE` | 1.0 | 1.5 | 1.5 | 1.0 | 1.0 | 1.0 | 0.5 |

`M` does not depend on joint 1 (a rotation of the whole arm about the
vertical) and hardly depends on the wrist, while joints 2 to 4 move most of
the mass. The pose, in contrast, depends on every joint. Three further
rules apply:

- A mass-matrix recompute always forces a pose recompute, because `M` is
  built from the poses.
- The first cycle after reset always recomputes both.
- When the poses are reused, the pose unit *replays* its stored link table
  into the dataflow instead of running the CORDIC. The Newton-Euler sweep
  therefore still runs every cycle with the current joint velocities, so
  `h`, `xdot` and `Jdot*qd` are never stale, and only their geometry may
  be.

The weight values are this design's choice: only the threshold and the
general trend of joint sensitivity come from the source. Both weight sets
are parameters of `corki_ace_unit`.

## Timing

Measured in simulation at the default parameters, from `start` to `done`:

| case | clock cycles |
|---|---|
| full recompute (poses and mass matrix) | 771 |
| poses only, mass matrix reused | 162 |
| both reused (link-table replay) | 27 |

In the full case the mass-matrix unit dominates: ten divisions of 48
cycles, plus accumulation and elimination. A control period of a few
milliseconds is thousands of times longer than any of these. At a 100 MHz
clock even a full cycle takes under 8 us. The design has not been
synthesised for a particular device, so no clock rate is claimed.

## Number format and model

- Every value is signed Q16.16 (32 bits). Products are taken at 64 bits
  and truncated back. There is no saturation except in the divider, so
  poses close to a singularity, where `Mx` exceeds about +/-2000, are out
  of range.
- The kinematic table is the public modified-DH table of the Panda. The
  link masses are the Panda's.
- Inertia is modelled as one point mass per link, placed at the origin of
  the next frame, plus 0.1 kg m^2 of armature on each joint. This is a
  simplification: a model with full inertia tensors would change the force
  and torque recursions and `M`, but not the structure.
- The task space is the 3-D **position** of the flange only (a 3x7
  Jacobian, 3x3 `Mx`). The Corki model predicts six cubic trajectories:
  three for position and three for the hand's orientation angles. The
  gripper opens and closes on a separate binary command. Orientation
  control is not built: it would need a 6x7 Jacobian, a 6x6 `Mx` and an
  orientation error, so the hand's orientation is currently left free.
  The `ND` constant exists, but the units are written for 3-vectors. The
  Gauss-Jordan engine could already handle a 6x6 system.
- External forces (`F_ext`) are taken as zero.
- Gains `Kp` and `Kv` are diagonal, one per task axis.

## Host interface

The host writes one word per cycle through `wr_en/wr_addr/wr_data` into a
shadow register set. The addresses are:

| address | contents |
|---|---|
| 0-6 | joint angles |
| 7-13 | joint velocities |
| 14-25 | the cubic coefficients, `14 + 3k + d`, where k = 0..3 selects a, b, c, d and d is the axis |
| 26 | trajectory time `t` in seconds |
| 27-29 | `Kp` |
| 30-32 | `Kv` |

Pulsing `start` copies the shadow set into the active set, so the host
can write the next cycle's inputs while the current one runs. When `done`
pulses, `tau` holds the result and `tau_valid` is high until `tau_ack`.
`tau_seq` counts results. `tau_overrun` counts results that were replaced
before they were acknowledged. Status outputs report the last cycle's
latency, its two ACE decisions and running counts of recomputes and
reuses.

## Files

| file | module |
|---|---|
| `rtl/corki_pkg.sv` | types, Q16.16 helpers, robot constants |
| `rtl/corki_top.sv` | the whole accelerator |
| `rtl/corki_input_buffer.sv`, `rtl/corki_output_buffer.sv` | host-side register banks |
| `rtl/corki_traj_gen.sv` | cubic reference and its two derivatives (Horner form, 2 cycles) |
| `rtl/corki_ace_unit.sv` | recompute / reuse decision (1 cycle) |
| `rtl/corki_pose_unit.sv`, `rtl/corki_cordic.sv` | forward kinematics, Jacobian, link-table replay |
| `rtl/corki_velocity_unit.sv`, `rtl/corki_accel_unit.sv`, `rtl/corki_force_unit.sv`, `rtl/corki_torque_unit.sv` | Newton-Euler stages |
| `rtl/corki_fifo.sv`, `rtl/corki_line_buffer.sv` | inter-stage buffers |
| `rtl/corki_mass_matrix_unit.sv`, `rtl/corki_div.sv` | `M`, `M^-1`, `J M^-1`, `Mx` |
| `rtl/corki_bias_force_unit.sv`, `rtl/corki_joint_torque_unit.sv` | final stages |
| `rtl/corki_micro_controller.sv` | cycle sequencer and statistics |
| `tb/corki_ref_pkg.sv` | floating-point reference model (kinematics, dynamics, control law, ACE) |
| `tb/<module>_tb.sv` | one self-checking testbench per module |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops. Each
has a watchdog. With Verilator 5:

```
files="rtl/corki_pkg.sv tb/corki_ref_pkg.sv $(ls rtl/*.sv | grep -v corki_pkg.sv)"
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb $files \
    tb/corki_top_tb.sv --top-module corki_top_tb -o sim
./obj_dir/sim
```

Replace `corki_top_tb` with any other `<module>_tb` to test a single
unit.

`corki_top_tb` runs the top at its default parameters for eight control
cycles:

- a full recompute;
- an identical repeat, in which both results are reused;
- a large move of joint 1 alone, which recomputes the poses only;
- a move of the middle joints, which recomputes everything; this result is
  left unacknowledged, to produce an overrun;
- four random small walks.

It compares every torque vector with the floating-point model, using the
same mix of fresh and reused matrices, within 0.05 N m + 2 %. It checks
the ACE decisions, the counters, the overrun and the latencies. It also
counts each mechanism: link records in flight in more than one stage,
the mass matrix running alongside the dataflow, and the line buffer
reversing order.

`corki_workload_tb` runs the trajectory-following workloads Corki-T, for
T = 1, 3, 5, 7 and 9. Each inference predicts nine steps of 3.3 ms, and T
of them are executed. Each variant runs two inferences of `3T` control
cycles, at an assumed 1.1 ms control period. The joints move smoothly at
up to 1.5 rad/s. Every torque is checked against the model. With this
motion almost all matrix updates are skipped:

| variant | control cycles | updates avoided | mean latency (cycles) |
|---|---|---|---|
| Corki-1 | 6 | 10 of 12 | 151 |
| Corki-3 | 24 | 46 of 48 | 58 |
| Corki-5 | 54 | 106 of 108 | 40 |
| Corki-7 | 96 | 189 of 192 | 36 |
| Corki-9 | 150 | 295 of 300 | 37 |

The unit testbenches compare against the same reference model, or
against direct formulas, over random inputs.

## Not built

The model inference on the server and the adaptive choice of how many
trajectory steps to execute are not part of this RTL. The camera, the Wi-Fi
link and the robot are not part of it either. All of these sit on the host
side of the input and output buffers. The architecture also mentions a
small scratchpad for intermediate data. Here that data lives in the
registers of the unit that produces it: the link table in the pose unit,
and `Mx` and `J M^-1` in the mass-matrix unit.
