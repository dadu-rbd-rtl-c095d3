# A streaming rigid-body-dynamics accelerator

Model-predictive control and trajectory optimisation call the rigid-body
dynamics of a robot thousands of times per control step. They need inverse
dynamics, forward dynamics, the mass matrix and its inverse, and the
derivatives of all of these with respect to joint positions and velocities.
The functions share one structure. They are recursions along the kinematic
tree of the robot: a pass from the base to the tips and then a pass back.

This RTL builds those recursions as **round-trip pipelines**. There is one
hardware submodule per link for the outward pass and one per link for the
return pass, and a FIFO connects the two submodules of each link. A task
enters every link at once and walks out along the forward submodules. Each
forward submodule leaves what its backward partner will need in the FIFO.
The task then walks back along the backward submodules. Every submodule
is a pipeline stage, so a new task can enter every clock cycle, and many
tasks of different kinds are in flight at once.

Seven functions are supported, all on one datapath:

| type | function | input (besides q, qd, f_ext) | output |
|---|---|---|---|
| 0 | ID: inverse dynamics | qdd | tau |
| 1 | FD: forward dynamics | tau | qdd |
| 2 | M: joint-space mass matrix | - | M (NB x NB) |
| 3 | Minv: its inverse | - | M^-1 |
| 4 | Delta-ID: derivatives of ID | qdd | d tau / d[q; qd] (NB x 2NB) |
| 5 | Delta-FD: derivatives of FD | tau | d qdd / d[q; qd], then M^-1 |
| 6 | Delta-iFD: derivatives of FD from a known M^-1 | qdd, M^-1 | d qdd / d[q; qd] |

The configured robot is a serial chain of **NB = 7 revolute joints** (an
arm of the KUKA LBR iiwa class). Arithmetic is 32-bit fixed point, Q16.16.

## Block diagram

```
 in_word ─► decode ─► trig ─► input_stream ─┬─► fb_module ──────────┐
 (32 bit)   (task)   (sin,cos)  (micro-      │   (RNEA ─► ΔRNEA)     │
                                instructions)├─► mminv_rtp ─────────┤
                          ▲                  │   (M or M^-1 rows)    ▼
                          │                  └─► descriptor FIFO ─► schedule ─► encode ─► out_word
                          │                                          │ A(x−y)
                          └────────────── feedback ◄─────────────────┘ (Delta-FD, stage 2)
```

- `decode_unit` collects one task from the word stream.
- `trig_unit` computes sin q and cos q for every joint once. No submodule
  evaluates a trigonometric function.
- `input_stream` turns the task type into micro-instructions for the two
  pipelines and issues them.
- `fb_module` is the forward-backward pipeline: RNEA followed by ΔRNEA.
- `mminv_rtp` is the backward-forward pipeline that produces M or M^-1.
- `schedule_unit` pairs the results of the two pipelines. It does the one
  remaining matrix product, A(x − y).
- `feedback_unit` holds a Delta-FD task between its two stages.
- `encode_unit` writes the result words.

## How the functions map onto the pipelines

Each task type becomes one or two **micro-instructions**:

| type | FB pipeline | BF pipeline | schedule |
|---|---|---|---|
| ID | RNEA with qdd = u | - | pass tau |
| FD | RNEA with qdd = 0 (bias torque C) | M^-1 | qdd = M^-1 (tau − C) |
| M, Minv | - | M or M^-1 | mirror triangle |
| Delta-ID | ΔRNEA with qdd = u | - | pass d tau |
| Delta-iFD | ΔRNEA with qdd = u | - | d qdd = M^-1 (0 − d tau) with the given M^-1 |
| Delta-FD, stage 1 | RNEA with qdd = 0 | M^-1 | qdd as FD; send to feedback |
| Delta-FD, stage 2 | ΔRNEA with qdd from stage 1 | - | d qdd = M^-1 (0 − d tau) |

The derivative of forward dynamics uses the identity
∂qdd/∂u = −M⁻¹ ∂tau/∂u, with ∂tau/∂u evaluated at the forward-dynamics
solution. This is why Delta-FD takes two trips through the FB pipeline.
The first trip finds qdd and M^-1. The second differentiates inverse
dynamics at that qdd. M^-1 waits in the feedback buffer between the trips.

Both pipelines keep task order. When `input_stream` issues a job, it
writes a **descriptor** into a FIFO: the task, its stage, and which
pipelines it used. `schedule_unit` pops descriptors in order. For each one
it waits until the head of every pipeline the job used is valid. An FD
job is issued to both pipelines in the same cycle, so its two results are
always at the heads together.

### Deadlock freedom of the feedback loop

A Delta-FD task re-enters `input_stream` after its first stage.
Second-stage jobs have priority over new tasks. On its own, that does not
prevent a deadlock: the feedback buffer could fill while `schedule_unit`
waits to push one more entry into it.

`input_stream` therefore admits at most `FBK_DEPTH` Delta-FD tasks that
have not yet come back. With that limit, the buffer always has room. An
assertion checks the count.

## The round-trip pipelines

All three pipelines have the same skeleton:

- **Per link, a pair of submodules.**
  - A forward submodule receives its parent's transfer data (velocity and
    acceleration, or their derivative columns). It sends the updated data
    to its child.
  - A backward submodule receives its child's transfer data (force, or
    articulated inertia) and sends it on towards the base.
- **A downward FIFO per link.** It carries what the forward submodule
  computed to the backward submodule of the same link: the link force and
  the trig values. It acts as a bypass buffer. The task can continue
  outward while the link's own result waits.
- **Lazy update.**
  - A backward submodule does not update the child's data in place.
  - It receives the child's contribution as an addend in the backward
    transfer.
  - It adds the addend to its own stored value and transforms the sum
    towards the parent.
- **Skew FIFOs.**
  - Link i starts its work about i cycles after link 0.
  - Each link has an input FIFO, so a task can be accepted for all links in
    one cycle.
  - Each link also has an output FIFO, so the finished task leaves all
    links in one cycle.
  - All FIFOs are 2·NB + 2 deep. That is enough for a full round trip at
    full rate.

Every submodule is one register stage with two outputs. The transfer and
the FIFO outputs have separate valid flags. A stage fires when its inputs
are present and both outputs have room. Nothing stalls globally. The
chain runs at one task per cycle, with a latency of about 2·NB cycles per
pipeline.

### RNEA (`rnea_fwd`, `rnea_bwd`, `rnea_rtp`)

The links use spatial (6-D) vectors in the form [angular; linear].

- **Forward submodule of link i:**
  - v_i = X_i v_{i−1} + S qd_i
  - a_i = X_i a_{i−1} + S qdd_i + v_i × S qd_i
  - f_i = I_i a_i + v_i ×* I_i v_i − f_ext,i
- **Backward submodule of link i:**
  - tau_i = S·(f_i + Σ children)
  - X_iᵀ (f_i + Σ children) goes to the parent.
- **Base:** the velocity is zero and the acceleration is gravity pointing
  up, the usual way of folding gravity into the recursion.
- **Joints:** every joint is revolute about its local z axis, so S = e₂ and
  the multiplications by S are wiring.
- **Link transforms:** X = rot(R_z(q)·R_x(±90°))·xlt(0, 0, d_i). The twist
  alternates in sign along the chain. It is computed from sin q and cos q
  alone.

### ΔRNEA (`drnea_fwd`, `drnea_bwd`, `drnea_rtp`)

The ΔRNEA pipeline carries the 2·NB derivative columns (∂/∂q_j, then
∂/∂qd_j) of v, a and f through the same round trip.

**Incremental columns.** Link i depends only on joints j ≤ i. Its
forward submodule therefore computes only those columns. The others are
zero and cost nothing. The backward submodule adds the column of its own
joint: the term from the derivative of the transform, S × *f. This makes
the hardware per link grow with its depth in the chain, as it would in
the real design.

**Pass mode.** A task issued with dmode = 0 crosses the ΔRNEA submodules
and returns tau with zero derivatives. Plain ID and FD jobs can therefore
share the pipeline with derivative jobs without reordering.

### Mass matrix and inverse (`mminv_bwd`, `mminv_fwd`, `mminv_rtp`)

This pipeline runs backward first, then forward.

The backward submodule of link i:
- builds the articulated-body inertia I^A_i (in M mode, the composite
  inertia);
- takes U_i = I^A_i S, which is the third column because S = e₂;
- takes D_i = U_i[2] and D_i⁻¹;
- produces row i of the result.

U is computed first because it lies on the critical path. The forward
submodule then carries the already-finished rows out to the children,
which complete the upper triangle. One mode bit selects M or M^-1.

The reciprocal (`recip_unit`) avoids a divider:
1. A leading-one detector normalises x to a mantissa m in [1, 2).
2. The seed 24/17 − 8/17·m is refined by three Newton–Raphson steps,
   r ← r(2 − m r).
3. The result is shifted back.

Inputs whose reciprocal does not fit in Q16.16 saturate.

## Stream formats

One 32-bit word per cycle in each direction, with valid/ready handshakes.
Values are Q16.16 two's complement.

**Input task:**

| field | words |
|---|---|
| type (values 0..6, in bits [2:0]) | 1 |
| q | NB |
| qd | NB |
| u (qdd or tau) | NB |
| f_ext, per link, in the form [n; f] | 6·NB |
| M^-1, row-major (Delta-iFD only) | NB² |

**Output:**

| function | words |
|---|---|
| ID, FD | NB |
| M, Minv | NB², row-major |
| Delta-ID, Delta-iFD | 2·NB², row i holds ∂/∂q then ∂/∂qd |
| Delta-FD | the same 2·NB², then M^-1 (NB²) |

`out_last` marks the final word of each result.

**Result order:**
- Results leave in issue order.
- The exception is Delta-FD. Its result leaves after its second stage, so
  tasks issued in the meantime can overtake it.
- Each result type has a distinct length, so a host can match Delta-FD
  results separately.

## Parameters and where the robot lives

| where | parameter | default | meaning |
|---|---|---|---|
| `dadu_rbd` | `NB` | 7 | links; must equal `rbd_pkg::NB_ROBOT` |
| `dadu_rbd` | `FBK_DEPTH` | 4 | Delta-FD tasks between stages |
| `dadu_rbd` | `DESC_DEPTH` | 8·NB | jobs in flight |
| pipelines | `FIFO_DEPTH` | 2·NB + 2 | per-link FIFOs |

`rbd_pkg` holds four things:
- the fixed-point type and the spatial-algebra functions;
- the record types;
- the robot description: `link_d_mm`, `link_twist`, `link_mass_g`,
  `link_com_mm`, `link_icom`, and `link_inertia` built from them;
- `NB_ROBOT`, which sizes the task records.

**The robot constants are placeholders.** They have iiwa-like magnitudes,
but they are not the real arm. To target a real serial arm, replace those
functions and `NB_ROBOT`. Link count, twists, offsets and inertias are
constants folded into each submodule. The hardware is specialised to the
robot, as intended.

## How far it can be trusted

Every block has a self-checking testbench in `tb/`. The numerical ones
compare with `rbd_ref_pkg`, an independent model in double precision. It
does not use any of the fixed-point functions. It provides:

- RNEA;
- M, built column by column from RNEA;
- a Gauss–Jordan inverse;
- central finite differences for every derivative.

`tb_dadu_rbd` runs the whole design at the default parameters. It sends
40 tasks covering all seven functions, in three phases:
1. back-to-back tasks, with the input rate checked;
2. a Delta-FD burst with the output held off, until the admission limit
   is hit;
3. random output back-pressure.

It checks every result word against the reference. It counts these
mechanisms and fails if any never occurs:
- feedback re-issue;
- pass mode;
- joint FB + BF issue;
- A(x − y) products;
- input stall and output stall;
- the admission limit.

The tolerances:

| values | tolerance |
|---|---|
| pipelines | 1–2 % relative, or a few hundredths absolute |
| end-to-end results | 3 % relative, or 1 % of the largest entry of the result |

The end-to-end tolerance is wider because fixed-point errors in M^-1 are
amplified by the A(x − y) products.

Known numerical limits of Q16.16:
- Entries of M^-1 for light distal links can reach a few hundred, which
  leaves about 2 significant digits in d qdd.
- Angles must lie in [−π, π].
- Velocities and accelerations should stay within a few units.

A wider fixed-point word would fix the first limit at a proportional
cost in multipliers.

## Departures from the described architecture

- **Serial chains only.** The architecture splits submodules into a root
  and branches for tree-shaped robots. It copies transfer data into every
  branch on the way out and sums the branch contributions on the way
  back. It also time-multiplexes symmetric limbs onto one branch array.
  None of that is built here. Quadrupeds with or without an arm, and
  humanoids, need it; a fixed-base arm does not.
- **No floating base.** All joints are revolute.
- **No resource sharing inside submodules.** Each submodule finishes its
  step in one cycle with its own multipliers. Light submodules would
  normally reuse a few arithmetic units over several cycles. This makes
  the RTL large, and synthesis of the full top is slow.
- **RNEA and ΔRNEA are chained,** not interleaved link by link. This costs
  latency, not throughput.
- **No numerical-integration step.** The schedule module does not produce
  integration steps for trajectory optimisation or MPC.
- **The mass-matrix update follows the composite-rigid-body form**
  S_iᵀ F_i[:, j]. The printed update with the transposed factors does not
  give M for a chain.
- **The host/memory interface is not part of the design.** Its signals
  are the top's word streams.

## Simulating

Everything is plain SystemVerilog 2017. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/rbd_pkg.sv tb/rbd_ref_pkg.sv $(ls rtl/*.sv | grep -v rbd_pkg) \
    tb/tb_dadu_rbd.sv --top-module tb_dadu_rbd -o sim && ./obj_dir/sim
```

The packages come first, then the modules.

Each testbench prints `TB_RESULT checks=N failures=M` at the end. A
watchdog ends runs that hang.

Build time is about a minute for the full design. For one block, compile
its testbench with the files it instantiates. For example,
`tb_rnea_rtp` needs `stream_fifo`, `rnea_fwd`, `rnea_bwd` and `rnea_rtp`.
