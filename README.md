# DRACO: a fixed-point rigid body dynamics accelerator in SystemVerilog

Model-predictive and other model-based robot controllers spend most of their
time evaluating rigid body dynamics (RBD). These functions are:

- inverse dynamics `tau = ID(q, qd, qdd)`;
- the inverse mass matrix `M^-1(q)`;
- forward dynamics `qdd = M^-1 (tau - C)`;
- the derivatives of ID and FD.

This RTL computes them with four ideas:

- **Narrow fixed-point words.** Every quantity is a 24-bit fixed-point word with
  12 integer and 12 fractional bits. That size fits one FPGA DSP multiplier
  instead of four.
- **A round trip pipeline.** It has one forward unit and one backward unit per
  joint, so a new task can enter while earlier ones are still in flight.
- **Deferred division.** The one division in the mass-matrix inversion is taken
  off the critical path. A few fully pipelined dividers are shared among the
  joints.
- **One shared issue rate.** The modules share DSP groups and are paced to a
  common initiation interval (II), so that modules working together do not
  wait on each other.

The design targets a serial robot arm such as a 7-joint manipulator. All
parameter defaults describe that case: `N = 7` joints and the 24-bit 12.12
format.

## Functions and data flow

```
 task (fn, q, qd, qdd, fext, tau) ─► dsp_alloc_ctrl ─► issue, II pacing, DSP owners
                                        │
            ┌───────────────────────────┼────────────────────────┐
            ▼                           ▼                        │
      rnea_module                  minv_module                   │
   Rf_1..Rf_N → Rb_N..Rb_1     Mb_N..Mb_1 → div_share → Mf_1..Mf_N → compensation
            │ tau / C                   │ M^-1                   │
            ▼                           ▼                        ▼
       tau FIFO, C FIFO ──────► matvec_multiplier ◄──── dtau/du columns (external dRNEA)
                                  y = M^-1 (vec - sub)
                                        │
                                    qdd / dqdd
```

| function | modules used | result |
|---|---|---|
| ID | RNEA | `tau` |
| Minv | Minv | `minv` (full symmetric, compensated) |
| FD | RNEA run with `qdd = 0` (gives the bias force C), Minv, multiplier | `qdd = M^-1 (tau - C)` |
| dID | RNEA (its torque goes out on `tau`). The derivative module is external. | `tau` |
| dFD | Minv, multiplier | `2N` columns `M^-1 dtau/du`, for u = q, then qd |

One task carries one function code and the state of every joint. A task of
another function waits until the pipelines have drained (a *mode switch*).
After that the DSP groups are re-assigned.

## Number format and conventions

- `draco_pkg` defines the format: `fx_t` is signed `W = 24` bits with
  `F = 12` fractional bits. For an 18-bit device, set `W = 18, F = 8`.
- Products round to nearest and saturate. The rounding error of one product is
  at most half an LSB. Sums wrap, as a DSP accumulator does.
- Spatial vectors are `[angular; linear]`.
- Every joint is revolute about its local z axis. The motion subspace is
  therefore the unit vector `e_2`:
  - `S^T f` picks element 2;
  - `S * s` adds to element 2.
- A joint transform is kept as a rotation `E = rz(q) * E_T` and an offset
  `r = r_T`. It acts as `X = [E 0; -E skew(r) E]`.
- Each task supplies `sin q` and `cos q`. No trigonometric unit is built.
- The robot model enters through ports. The port `lk[i]` holds, for each link:
  - the tree transform `E_T`, `r_T`;
  - the 6x6 spatial inertia.

  Nothing about the robot is hard-wired.
- The chain is serial: the parent of joint `i` is `i-1`.

## The round trip pipeline (RNEA)

Each joint has two units:

- the forward unit `rnea_fwd_unit` computes velocity, acceleration and
  net force;
- the backward unit `rnea_bwd_unit` adds the child's force, reads the joint
  torque, and transforms the force to the parent.

The two units of one joint are far apart in time. The last joint's backward
step runs right after its own forward step, but joint 1's runs 2N−1 cycles
after it. A `sync_fifo` per joint holds the force and the transform in between.
Each forward stage keeps a copy of the task it is working on, so tasks
never mix.

Timing:

- Each unit takes one cycle and is registered.
- A task's torque vector is out `2N` cycles after the task enters.
- The pipeline itself accepts a task every cycle. The II is imposed by the
  controller.

## Mass matrix inversion with deferred division

The classic articulated-body inverse of M walks from the tip to the base. At
each joint it divides by the scalar `D_i = S^T U_i` (`U_i = I^A_i S`), and the
next backward step needs `1/D_i`. A division takes tens of cycles, so the
backward pass ends up waiting on the divider at every joint.

Division deferring removes this wait. The inverse is never formed during the
backward pass:

1. Every quantity the backward unit `Mb_i` hands to its parent is multiplied
   by a *holding factor*. The factors follow `alpha_i = (D_i alpha_{i+1}) alpha_{i+1}`
   with `alpha_{N+1} = 1`.
2. The scaled articulated inertia and the scaled rows of M^-1 then go upward
   with no division.
3. Each `Mb_i` sends the single value `D_i alpha_{i+1}` to a divider.
4. The reciprocal comes back to the forward unit `Mf_i`. By then the rest of
   the backward pass has run in parallel with the division.
5. `Mf_i` multiplies its held row by the reciprocal. That removes the scale
   and gives row `i` of M^-1 (upper triangle).
6. The lower triangle is mirrored from the upper one.

The header comments of `minv_bwd_unit.sv` and `minv_fwd_unit.sv` give each
update line by line.

**Range caveat.** The holding factor grows very fast. Along the chain it
behaves like `D^(2^(N-i))`. In 12.12 fixed point this stays in range only in
two cases:

- for short chains;
- for chains whose `D_i` are close to 1.

A general 7-joint arm with realistic inertias overflows near the base. The
tests therefore use two robots:

- a 7-joint chain with parallel joint axes (`D ≈ 1`);
- a general 3-joint arm with rotated axes.

Deploying the design on a real 7-joint arm needs one of two changes: a wider
format for the scaled Minv quantities, or a renormalisation of alpha. This
design provides neither. RNEA is not affected.

### Sharing the dividers

`pipelined_divider` computes `2^(2F) / d` with a radix-2 restoring algorithm:

- one quotient bit per stage;
- 27 cycles of latency for F = 12;
- a new division every cycle;
- a tag that travels with each division.

Suppose tasks enter the Minv pipeline every 3 cycles. Then `Mb_i` sends its
divisor one cycle after `Mb_{i+1}`, so three neighbouring units never ask for
a divider in the same cycle. `div_share` therefore:

- gives each group of `G = 3` units one divider (`ceil(7/3) = 3` dividers);
- gives every unit a small request queue;
- arbitrates each group round robin.

With staggered requests no request ever waits. If tasks come closer together
(only possible when `minv_module` is used on its own), requests collide. The
queues absorb the collision and `arb_wait` reports it. Results go to one FIFO
per unit.

That FIFO doubles as the extra buffer that joint 1 needs. There, `Mf_1` follows
`Mb_1` at once but must wait the whole divider latency for its reciprocal.

`Mf_i` fires when three things are present:

- its joint's FIFO entry;
- its reciprocal;
- the parent's forward transfer, unless `i = 1`.

`fwd_wait` reports a unit that has its data but is still waiting for its
reciprocal.

### Compensation

Rounding the reciprocal produces a systematic error, mostly on the diagonal of
M^-1. `minv_compensation` adds an offset matrix to the result. The offsets come
from an offline error analysis and are a port (`comp_offset`). Tie the port to
zero to disable compensation.

## DSP groups and II alignment

The shared resources are two DSP groups:

- `DSP_DR`, between RNEA and the derivative module;
- `DSP_MR`, between RNEA and Minv.

`dsp_alloc_ctrl` assigns them per function and issues tasks at that function's
II:

| function | DSP_DR owner | DSP_MR owner | II |
|---|---|---|---|
| ID | RNEA | RNEA | 3 |
| Minv | idle | Minv | 4 (chosen) |
| FD | idle | Minv | 4 |
| dID | dRNEA | idle | 4 |
| dFD | dRNEA | Minv | 4 (chosen) |

RNEA keeps the shared groups only while it runs alone. When it works with
another module it gives them up, so its own II rises to the partner's. A group
whose partner module is not used stays idle. The outputs `shared_to_rnea`,
`dr_to_drnea` and `mr_to_minv` encode this table.

The controller has two event outputs:

- `ii_stall` marks a task held back to keep the II;
- `mode_switch` marks a re-allocation, which happens only with no task in
  flight.

Every II is at least 3, so the divider requests in the top never collide.

**Limitation.** In this RTL every unit has its own fully parallel datapath, so
nothing is multiplexed between modules. The owner signals are outputs and
enables; they do not steer real multiplier groups. The II pacing is real. The
physical sharing would need the multiply schedule of each unit, which is not
specified here.

## Top level (`draco_top`)

**Task input:**

- `task_valid`, `task_ready`;
- `task_fn` (see `fn_e` in the package);
- `task_jin[N]`: sin, cos, qd, qdd and external force of each joint;
- `task_tau` (used by FD).

**Model inputs:**

- `lk[N]`;
- `comp_offset`;
- `a_base`, the base acceleration. Use minus gravity for a fixed base.

**Results**, each with its own valid:

- `tau`;
- `minv`;
- `qdd`;
- `dqdd` with the column index `dqdd_col`.

**Derivative input:** `dtau_valid`, `dtau`, `dtau_ready`. These take the `2N`
columns of `dtau/du` for every dFD task, in task order, from an external
derivative module.

**Status:**

- `cur_fn`, `cur_ii`;
- the DSP owners;
- `drnea_enable`;
- four event pulses: `ev_ii_stall`, `ev_mode_switch`, `ev_div_wait`,
  `ev_fwd_wait`.

**Latency at N = 7:**

- ID: 14 cycles;
- Minv: about 45 cycles (2N for the two passes, about 27 for the divider and
  FIFOs, 1 for compensation);
- FD and each dFD column: one cycle after both operands are present.

## What departs from the original design

- **Serial chains only.** Branched robots (legged robots, humanoids, two-arm
  robots) need a tree-structured pipeline. It is not built.
- **No derivative module.** The ΔRNEA module that computes `dtau/dq` and
  `dtau/dqd` is absent. dID produces only the RNEA part, and dFD takes its
  columns from outside.
- **DSP sharing not physical.** The sharing is expressed as pacing and owner
  signals only (see above).
- **Divider.** The divider is a plain restoring array, not a vendor IP.
- **Minv range.** The numeric range of the deferred-division Minv limits the
  robots that can be used at 24 bits (see the range caveat above).
- **Minv and dFD IIs.** These two IIs are chosen, not specified.

## Verification

Every module has a self-checking testbench in `tb/`:

- Each ends with a `TB_RESULT checks=… failures=…` line.
- Each has a watchdog.
- `tb/tb_ref_pkg.sv` holds floating-point references: RNEA, the original
  dividing Minv algorithm, and spatial algebra. It also generates random robots
  and joint states.
- Results are compared with tolerances suited to 12 fractional bits.
- Latency and rate are checked where they are part of the design:
  - RNEA latency of 2N;
  - divider latency and throughput;
  - Minv results every 3 cycles with no divider collision;
  - a collision when tasks are back to back;
  - the II of every function in the top.

`tb_draco_top` runs the top with its default parameters. It drives a sequence
of 22 tasks that uses every function and every switch between them. It checks
all results, and it checks that each mechanism happens:

- II stalls;
- mode switches;
- forward units waiting for a reciprocal;
- dFD column streaming;
- no divider collisions.

`tb_workload_iiwa` runs the top at its defaults on an approximate model of a
7-joint industrial arm (KUKA LBR iiwa). It streams 30 inverse-dynamics tasks
with gravity:

- torques reach about 60 Nm;
- all of them match the floating-point RNEA;
- each arrives 2N cycles after its task.

The same test then runs one Minv task on that arm and prints its error. The
error is about 116, far outside tolerance. This is the range limit described
above, measured on a realistic arm.

Simulate with plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/draco_pkg.sv tb/tb_ref_pkg.sv tb/tb_draco_top.sv --top-module tb_draco_top
./obj_dir/Vtb_draco_top
```

For any other testbench, replace the testbench file and the top module name.
