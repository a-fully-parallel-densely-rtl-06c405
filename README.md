# PIMI: a fully parallel probabilistic Ising machine with inertia

This repository holds synthesizable SystemVerilog for a probabilistic Ising
machine with inertia (PIMI). It also holds self-checking testbenches and a
bit-level reference model for the design.

The machine looks for low-energy states of a dense Ising model:

    E(s) = -h^T s - s^T J s,        s_i in {-1, +1}

It updates every spin of the model at the same time in each step. The target
application is near-maximum-likelihood MIMO detection at a base station. There
the host turns each received vector into an Ising instance `(J, h)`, using the
Delta-Ising MIMO (DI-MIMO) mapping. The hardware runs 32 independent stochastic
trials on that instance and returns their final spin states. The host then keeps
the trial with the lowest energy. The same kernel, with other parameters, solves
Max-Cut and Sherrington–Kirkpatrick (SK) spin-glass instances.

## 1. The update rule and why inertia matters

A plain probabilistic Ising machine updates one spin at a time:

    I_i = sum_j J_ij s_j + h_i
    s_i <- sign(tanh(beta I_i) + eta * noise)

Updating all spins at once from the same old state is fast. It is also
unstable: two coupled spins can each see the other's old value and flip
together, forever. PIMI adds a self-alignment ("inertia") term that biases each
spin toward its current value:

    s_i(t+1) = sign( tanh(beta(t) I_i(t)) + xi * s_i(t) + eta(t) N_i(t) )

Here `xi` is a constant, and `N_i(t)` is a standard-normal sample. The term
`beta(t)` is the inverse temperature, and `eta(t)` is the noise amplitude.

With the inertia term, a spin flips only when its field and the noise together
beat `xi`. That damps the paired oscillations, so the whole spin vector can be
updated in one parallel step. As a result, the cost of one update step grows
with the depth of an adder tree, log2 N, instead of with N.

The whole rule is evaluated in fixed point:
- `tanh` comes from a small table (section 4).
- The noise and the two schedules are tables generated off-line and loaded
  before a run.

## 2. Block structure

```
                 pimi_accel  (K kernels side by side, K = 10)
 host load  ──►┌──────────────────────────── pimi_kernel ───────────────────────────┐
 port          │ coupling_store ──rows of J, h──► mvm_row × RL ──fields──► field_buffer
 (J, h, s0,    │ spin_store ──whole spin vector of one trial──┘                 │
  beta, eta,   │     ▲                                                          ▼
  noise)       │     └──── new spins ◄── spin_update × AL lanes ◄── tanh_lut   │
               │ sched_noise_store ──beta(t), eta(t), N_i(t)──┘                 │
               │ pimi_ctrl: step counter, phase, issue order, start/busy/done    │
               └────────────────────────────────────────────────────────────────┘
```

| Module | Role |
|---|---|
| `pimi_pkg` | Default sizes, load-port encoding `ld_sel_e`, controller phases `phase_e`. |
| `tanh_lut` | L-level tanh table (combinational). |
| `mvm_row` | One local field per cycle: N sign-selects and a pipelined adder tree. |
| `spin_update` | The update rule for AL spins per cycle; 2-cycle pipeline. |
| `coupling_store` | J (row-wide read) and h. |
| `spin_store` | Spins of all M trials. Read ports for the MVM, the activation stage and the host. |
| `field_buffer` | All M×N fields of the current step, between the two phases. |
| `sched_noise_store` | beta(t), eta(t) and N_i(t) for t < T_MAX. |
| `pimi_ctrl` | Sequencer of the two-phase update step. |
| `pimi_kernel` | One solver kernel: everything above, plus the host load and read-out ports. |
| `pimi_accel` | Top: K independent kernels. Every kernel port becomes an array indexed by kernel. |

## 3. One update step: MVM phase, then activation phase

The MIMO kernel cannot afford N·M adder trees. It builds `RL` adder-tree rows
(default 1) and `AL` activation lanes (default 4), and it time-multiplexes them
over the spins and trials. Each step has two phases, and the controller drains
the pipeline between them. Because of this barrier, no spin of step t changes
before every field of step t has been computed from the old spins. The update is
therefore exactly the parallel rule above, however the work is scheduled.

**MVM phase.** The controller issues one (trial, row block) pair per cycle, in
this loop order:
- the group g of G = 4 trials, outermost;
- then the row block;
- then the trial within the group.

Each issue does three things:
- `coupling_store` returns RL whole rows of J, with no address decoding in the
  datapath.
- `spin_store` broadcasts the chosen trial's N-bit spin vector to every row.
- Each `mvm_row` computes `sum_j ±J_ij + h_i`. The `±` is a sign select, since
  spins are ±1, so no multipliers are used.

The tree has a register level after the sign selects and one per adder level. The
field therefore leaves the row `log2 N + 2` cycles after issue and is written into
`field_buffer`. This phase takes `M·N/RL` issue cycles plus the `log2 N + 2`
drain cycles.

**Activation phase.** The controller issues one (trial, lane block) pair per
cycle. Each of the AL `spin_update` lanes does the following:
- It reads the field from `field_buffer`.
- It reads the old spin from `spin_store`, and `N_i(t)` from
  `sched_noise_store` at the current step.
- Stage 1 forms `beta·I` and `eta·N`.
- Stage 2 looks up tanh, adds `±xi`, then adds `eta·N`, and takes the sign.

The new spins are written back in place, and they also appear on the trajectory
stream `traj_*`. This phase takes `M·N/AL` issue cycles plus 2 drain cycles.

**Cycle count.** One step takes

    P = M·N/RL + (log2 N + 2) + M·N/AL + 2

With the MIMO defaults, this is 1024 + 7 + 256 + 2 = 1289 cycles. A 32-step
instance therefore takes 41,248 cycles, which is 150.5 µs at 274 MHz. The HLS
design this RTL follows reported 40,202 cycles for the same instance, so this
design is 2.6 % slower. Two things explain the difference:
- The explicit drains cost 9 cycles per step.
- The original schedule is not known at cycle level.

The `busy` output is high for exactly `steps · P` cycles. The testbenches check
this.

## 4. Number format and the tanh table

All data words are signed fixed point. A word has `W` bits, of which `F` are
fractional bits (value = word / 2^F).

- **MIMO defaults:** W = 16 and F = 12 (Q4.12). This gives a range of
  [-8, 8) and a step of 1/4096.
- **Max-Cut and SK:** W = 4 and F = 2. This gives a range of [-2, 1.75] and a
  step of 0.25.

The arithmetic rules are these:
- Products (`beta·I`, `eta·N`) are truncated toward zero, then saturated to W
  bits.
- Each sum is saturated to W bits. The update adds its terms pairwise, in the
  order `(tanh + xi·s) + eta·N`.
- The adder tree is wider, at `W + log2 N + 1` bits. It cannot overflow, and
  only the final field is saturated, after `h` is added. The published
  description of the design is inconsistent on this point: one passage
  describes a wider accumulator, another says every intermediate value uses
  the data format. This design follows the first.
- `sign(0)` is +1.

**The tanh table.** The interval [-1, 1) is cut into L equal bins. Bin k
returns the level `-1 + 2k/(L-1)`, truncated toward zero to the grid. Inputs
below -1 return -1, and inputs at or above +1 return +1.

With L = 4, the levels are -1, -1/3, +1/3 and +1, and the bin edges are at -1,
-1/2, 0 and +1/2. So the table needs only a shift of `x + 1` to find its bin,
with no comparators per level. `tanh_lut` builds the levels at elaboration time
from the formula above, so L and F are free parameters.

## 5. Using a kernel

**Spin encoding.** Each spin is one bit: 1 means +1 and 0 means -1. A trial's
spins form an N-bit vector, with bit i holding spin i.

**Loading.** Loads use one word per cycle, into bank `ld_bank`. During a run,
only J, h and spin loads into the bank that is not running are accepted. Other
writes during a run are ignored, and an assertion flags them. Set `ld_valid` together
with the fields below:

| `ld_sel` | `ld_addr` | data |
|---|---|---|
| `LD_J` | `i*N + j` | `ld_data` = J_ij |
| `LD_H` | `i` | `ld_data` = h_i |
| `LD_SPIN` | trial `a` | `ld_spins` = initial spin vector s_a(0) |
| `LD_BETA` | step `t` | `ld_data` = beta(t) |
| `LD_ETA` | step `t` | `ld_data` = eta(t) |
| `LD_NOISE` | `t*N + i` | `ld_data` = N_i(t) |

Tables keep their contents across runs. For MIMO detection, the schedule and
noise tables are therefore loaded once. After that, each new instance needs
only J, h and the initial spins.

- J is used as given. Symmetry and a zero diagonal are the host's
  responsibility.
- Scaling J, for example the 1/sqrt(N)-type normalisation used for Max-Cut, is
  also left to the host.

**Running.** Pulse `start` with two inputs:
- `cfg_steps`: the number of steps, at most `T_MAX`.
- `cfg_xi`: the inertia constant, sampled at start.

`busy` rises on the next cycle. `done` pulses for one cycle after
`cfg_steps · P` cycles, and `cfg_steps = 0` completes at once.

**Reading out.** After `done`, read each trial's final spin vector through
`rd_trial`/`rd_spins`. This read is combinational.

**Trajectory stream.** During a run, `traj_valid` marks every block of AL new
spins as it is written, tagged with its step, trial and block. A host that
scores every visited state uses this stream, as the Max-Cut and SK experiments
do. A MIMO host can ignore it.

**The accelerator top.** `pimi_accel` repeats these ports K times, as arrays,
and adds `all_idle`. Its kernels share nothing, so a host drives them as
independent workers. Each worker takes the next instance, loads it, starts the
kernel and reads it back. Throughput scales with K.

## 6. Configurations

| Parameter | MIMO default | Max-Cut / SK | Meaning |
|---|---|---|---|
| `W`, `F` | 16, 12 | 4, 2 | data format |
| `N` | 32 | ≤ 32 (power of two) | spins |
| `M`, `G` | 32, 4 | 1, 1 | trials per instance, trials per group |
| `RL` | 1 | N | adder-tree rows |
| `AL` | 4 | N | activation lanes |
| `T_MAX` | 64 | 100·N | depth of the schedule and noise tables |
| `L` | 4 | 4 | tanh levels |
| `K` (top only) | 10 | – | kernels |

Notes on the MIMO configuration:
- N = 32 is an 8×8 MIMO system with 16-QAM. Each of the 16 real dimensions
  carries two spins, so the correction to the MMSE estimate is `s1 + s2`, in
  {-2, 0, 2}.
- Its schedule is `beta = 1`, `xi = 2` and `eta(t) = sqrt(1/(5 gamma(t)))`, with
  `gamma` rising linearly over the run. The end points of `gamma` are not part
  of the design, since they are table contents. `pimi_mimo_tb` uses 0.03 to
  0.3, which gives `eta` from 2.6 down to 0.8. With much weaker noise, the
  inertia term (`xi = 2` against a tanh of at most 1) freezes the initial
  spins, and detection falls behind plain MMSE.
- A 16×16 system needs `N = 64`. Its run takes 64 × 2570 = 164,480 cycles.

Notes on the Max-Cut and SK configuration:
- This is the fully unrolled kernel: all N fields and all N updates happen in
  one issue cycle each, so `P = log2 N + 6`. For N = 16 this is 10 cycles.
- The schedule uses `beta(t) = beta_scale · tanh(beta_init + dbeta · t)` and
  `eta = sqrt(beta/5)`.
- `xi` is 0.7 for Max-Cut and 0.5 for SK. In the 4-bit format, 0.7 becomes
  0.5.
- The table sizes grow with `T_MAX · N`. Note that a fully unrolled 16-bit
  kernel with large N is a very large circuit.

## 7. Where this design departs from the published one

- **Memories.** All storage is written as register arrays with asynchronous
  reads, which suit the row-wide and lane-wide access. An FPGA or ASIC
  flow may map them to partitioned block RAM or to flip-flops. Either way, the
  read timing must then be kept combinational or the controller retimed.
- **Two banks for continuous operation.** Each kernel holds two banks of
  instance data (J, h and the trial spins). A host loads the next instance
  into the idle bank (`ld_bank`) while the current one runs, starts it with
  `cfg_bank` one cycle after `done`, and reads the finished results out of the
  other bank (`rd_bank`). The schedule and noise tables are shared and load
  only while idle. The published kernels also overlap instances, but how they
  do so is not described; this bank scheme is this design's own.
- **One noise sample per spin and step.** `N_i(t)` is shared by all M trials
  of a step. Trials differ through their initial spins, and through their
  diverging states once they evolve.
- **Phase drains.** The 9 drain cycles per step are explicit (section 3).
- **Host link.** The PCIe, HBM and AXI path of the FPGA platform is replaced by
  the word-wide load port.
- **Max-Cut scaling.** The coupling scale of the Max-Cut kernels is applied by
  the host, not after accumulation.
- **Field convention.** The kernel computes `I = J s + h`. For the energy
  `-h^T s - s^T J s`, the exact local field is `h + 2 J s`, so a host should
  load `h/2` with `J`, as `pimi_mimo_tb` does, or equivalently `2J`.
- **Not built.** Host software is not built. This covers DI-MIMO formulation,
  energy evaluation and selection, and the scheduler. The testbenches play
  these roles where they need them.

## 8. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and stops. Each also has a watchdog.

The reference is `tb/pimi_ref_pkg.sv`, a bit-level model written separately
from the RTL. It uses integer fixed-point arithmetic, and it derives the tanh
table from real-valued arithmetic.

| Testbench | What it shows |
|---|---|
| `tanh_lut_tb` | Every 16-bit input of the 4-level table; every input of an 8-level, 8-bit table. |
| `mvm_row_tb` | Random rows, exact sums with saturation, latency log2 N + 2. |
| `spin_update_tb` | Random and directed lanes against the update rule, latency 2, sign(0). |
| `coupling_store_tb`, `spin_store_tb`, `field_buffer_tb`, `sched_noise_store_tb` | Every port against a shadow copy. |
| `pimi_ctrl_tb` | Issue order, drain gaps and run length, cycle by cycle; start ignored while busy; 0-step runs. |
| `pimi_kernel_tb` | Default kernel, three 32-step instances in continuous mode: each next instance is loaded during a run and started one cycle after `done`. Every trajectory block and final spin is bit-exact, and each run takes 41,248 cycles. |
| `pimi_accel_tb` | The top at default size: 10 kernels and 14 instances, dispatched by 10 concurrent "workers". |
| `pimi_mimo_tb` | The default kernel detecting 8×8 16-QAM MIMO. The testbench acts as the host: Rayleigh channels, MMSE, DI-MIMO instance, decoding of the lowest-energy trial. 180 channel uses at Eb/N0 = 15, 20 and 25 dB, all bit-exact. The pooled bit errors must not exceed those of MMSE; the seed used gives 38 against 115. |
| `pimi_maxcut_tb` | Fully unrolled 4-bit kernel on random 16-node Max-Cut graphs, 1600 steps each. Bit-exact, 10 cycles per step; the best cut is compared with exhaustive search. |

`pimi_accel_tb` checks every final vector and every run time. It also counts the
events the design depends on, and it fails if any of them never happens:
- kernels running concurrently;
- kernel reuse;
- saturated fields;
- the inertia term holding a spin against its field;
- flips;
- trajectory traffic.

**Simulating with plain Verilator (5.x).** The package files must come first:

```
verilator --binary --timing --assert -Wno-fatal --top-module pimi_accel_tb \
    rtl/pimi_pkg.sv tb/pimi_ref_pkg.sv \
    rtl/tanh_lut.sv rtl/mvm_row.sv rtl/spin_update.sv rtl/coupling_store.sv \
    rtl/spin_store.sv rtl/field_buffer.sv rtl/sched_noise_store.sv \
    rtl/pimi_ctrl.sv rtl/pimi_kernel.sv rtl/pimi_accel.sv \
    tb/pimi_accel_tb.sv
./obj_dir/Vpimi_accel_tb
```

For another testbench, change `--top-module` and the last file. Passing every
RTL file is harmless. The full-size top test runs in about a second after
compilation.

Expected lint output:
- an unused-bits note on the tanh bin index;
- a note that `rst_n` is used both as an asynchronous reset and in the
  assertions' `disable iff`.

Both are explained in the module headers.

**Confidence.** The model and the RTL agree bit for bit on the default MIMO
kernel and on the unrolled Max-Cut kernel. The model follows the fixed-point
rules described above, so it checks the RTL against those rules, not against the
original HLS code. Where section 7 lists a departure, the results will not
match the original design bit for bit. Examples are the shared noise and the
wide accumulator. Timing closure at 274 MHz has not been checked.
