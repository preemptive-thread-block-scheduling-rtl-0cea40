# Preemptive SRTF thread block scheduler with a structural runtime predictor

A GPU that runs several kernels at once still hands out their thread blocks
first-in first-out: a short kernel that arrives behind a long one waits until
every block of the long one has been issued. This RTL replaces that FIFO
thread block scheduler (TBS) with a **Shortest Remaining Time First** (SRTF)
scheduler. Running thread blocks are never interrupted, but the scheduler may
stop issuing new blocks of a kernel at any time and give the freed SM
resources to another kernel. That is the only preemption a GPU can afford.

SRTF needs to know how long each kernel still has to run. The scheduler
learns this online, on every SM, from the durations of the kernel's own first
thread blocks. It needs no offline model and no history of earlier runs. An
optional fairness mode, **SRTF/Adaptive**, shares the SMs between kernels
when running them strictly one after the other would slow one kernel down
much more than the other.

The design follows the scheduler and the "Simple Slicing" predictor proposed
by Pai, Govindarajan and Thazhuthaveetil ("Preemptive Thread Block Scheduling
with Online Structural Runtime Prediction for Concurrent GPGPU Kernels",
2014). That work describes the scheduler functionally, inside a GPU
simulator. Widths, handshakes, the issue rate and how the logic is organised
are this implementation's own choices. They are listed in the section on
departures below.

## Why a few thread blocks predict a whole kernel: the staircase model

All thread blocks of a grid run the same code. An SM holds at most `R` blocks
of a grid at a time. `R` is the *maximum residency*, set by whichever of
threads, warps, registers, shared memory or the 8 block contexts runs out
first. If every block takes about `t` cycles, the blocks on one SM finish in
steps of `R` blocks every `t` cycles, like a staircase. An SM given `N`
blocks then needs

    T = ceil(N / R) * t

So once one block has finished, `t` is known, and the runtime of the whole
kernel on that SM can be estimated. `R` is known at launch
(`occupancy_calc`).

Real kernels break the model in three ways:

* `t` changes when the residency changes;
* `t` changes when the set of co-running kernels changes;
* some kernels' blocks simply differ in work.

The predictor deals with this in two ways. It re-measures `t` whenever
conditions change. It also adds the cycles already spent, so that the error
cannot build up over the run.

## The Simple Slicing predictor (`ss_predictor`)

Every SM has its own predictor, because SMs running the same kernel behave
differently. Per kernel slot it keeps:

| state | meaning |
|---|---|
| `Active` | cycles in which the kernel had a block resident on this SM |
| `Done` | blocks of the kernel finished on this SM |
| `Total` | blocks expected on this SM, `ceil(Blocks / 15)` |
| `Resident` | residency used in the formula, `R` (or the sharing limit) |
| `t` | measured block duration |
| `Reslice` | a new slice has begun; the next finished block re-measures `t` |
| `Pred` | predicted total runtime |

Block start times are stored per block slot of the SM (slots 0..7).

A **slice** is a stretch of time in which `t` is assumed constant. A slice
ends at any kernel launch, any kernel end, or a residency change. Each of
these sets `Reslice`, for every kernel in the case of launches and ends.
When a block ends:

1. `Done` is incremented.
2. If `Reslice` is set, `t` becomes that block's duration and `Reslice` is
   cleared. So `t` is always the duration of the first block to finish in
   the current slice.
3. The kernel is marked pending. In a later cycle, one pending kernel per
   cycle, the predictor computes

       Pred = Active + (Total - Done) * t / Resident

   (`Total - Done` saturates at 0). The division by `Resident` (1..8) is a
   restoring divider with one 5-bit subtractor per quotient bit.

The scheduler compares **remaining** times, `Pred - Active`, saturating at
0. A kernel with no prediction yet counts as longest (all ones). `pred_evt`
pulses for one cycle with the kernel whose `Pred` was just written.

## SRTF: sampling and hand-off (`srtf_sampler`, `kernel_select`)

Take kernel A running on all SMs when kernel B arrives.

1. **Direct start.** A kernel that arrives when no running kernel has blocks
   left to issue (for example, on an idle GPU) becomes runnable at once,
   with no sampling.
2. **Sampling.** Otherwise B waits in a FIFO queue. Kernels are sampled one
   at a time, in arrival order, on a single SM: SM 0 (`SAMPLE_SM`). While B
   is sampled, SM 0 issues only B's blocks. It first has to wait for its
   resident A blocks to finish; this is the *sampling delay*. The other SMs
   keep running A.
3. **Sample prediction and hand-over.** When B's first block on SM 0 ends,
   SM 0's predictor writes a prediction for B. B becomes runnable, and its
   remaining time is copied to every other SM's predictor as their initial
   prediction (`sample_copy` pulses).
4. **Per-SM decision.** From then on, each SM issues only from the runnable
   kernel with the least remaining time *according to its own predictor*.
   If B is shorter, an SM switches to B as its A blocks finish and free
   resources. This is the *hand-off delay*. Every block end refines the
   predictions. If they later favour A again, the SM switches back.
5. While not sampling, a single kernel is issued per SM. Resources that
   kernel cannot use stay idle; they are not filled with another kernel's
   blocks. When the chosen kernel has issued all its blocks, it drops out of
   the choice, and the next kernel fills the SM.
6. If the running kernels run out of blocks to issue while B is still being
   sampled, sampling stops early and B becomes runnable without a
   prediction, so that no SM sits idle.

When all blocks of a kernel have finished (`Total_Blocks_Done`, counted over
all SMs), the kernel ends. `kend` pulses, every predictor starts a new
slice, and the kernel slot is freed.

## SRTF/Adaptive: the fairness check (`adaptive_ctrl`)

Suppose SRTF runs two kernels one after the other, with remaining times
`T1 <= T2`. The first is slowed down by 1, the second by `(T1 + T2) / T2`.
In general, order the kernels by remaining time. Kernel i's slowdown is the
sum of the remaining times up to and including its own, divided by its own
remaining time. If the largest slowdown minus the smallest exceeds 0.5, the
schedule counts as unfair. The controller then enters **sharing mode**: the
kernel with the least remaining time may hold at most 3 blocks per SM, and
the other kernels use the rest. 3 is one less than half of the 8 block
contexts.

The test needs no divider: `2 * (sum of the remaining times of the kernels
ahead of i) > T_i`. The decision is taken from SM 0's predictions. It is
re-taken only when the set of runnable kernels with a prediction changes,
and is held in between. When the limit changes, the affected predictors get
a new `Resident` value and start a new slice.

## Block map

```
tbs_top
 ├─ occupancy_calc        R of a launched grid
 ├─ srtf_sampler          kernel table, arrival queue, sampling, hand-over, kernel end
 ├─ adaptive_ctrl         SRTF/Adaptive fairness check, sharing mode
 └─ per SM (x15)
     ├─ sm_resources      block-slot table, resources in use, "does one more block fit"
     ├─ ss_predictor      Simple Slicing predictor
     └─ kernel_select     SRTF choice of the next kernel for this SM
tbs_pkg                   constants, launch descriptor struct, kernel-state enum
```

All modules are written for synthesis. The SMs themselves are outside the
design. `tb/sm_model.sv` is a timed behavioural stand-in used by the
testbenches.

## Interface and timing of `tbs_top`

* **Launch.** `launch_valid` with `launch_desc` is accepted in a cycle where
  `launch_ready` is high. `launch_desc` holds blocks, threads per block,
  registers per thread and shared-memory bytes per block. `launch_ready` is
  high while one of the 8 kernel slots is free. `launch_kid` is the slot the
  kernel gets. A grid needs at least one block, and at least one of its
  blocks must fit on an empty SM (R of 1 or more). A freed slot is offered
  again from the cycle after its `kend` pulse.
* **Issue.** At most one block is issued per cycle, over all SMs. The SMs
  are scanned round robin, starting after the last one served. The first SM
  whose selected kernel fits gets the block. `disp_valid` comes with
  `disp_sm`, `disp_kid`, `disp_slot` (block slot 0..7 on that SM) and
  `disp_block` (the block's index in its grid). The SMs must accept every
  issued block.
* **Completion.** `done_valid[s]` / `done_slot[s]` report a finished block,
  at most one per SM per cycle.
* **Kernel end.** `kend_valid` / `kend_kid` pulses once per kernel, two
  cycles after its last block is reported.
* **Status.** `sampling` and `sampling_kid`, `sample_copy`, `share_mode`
  and `fast_kid`.
* **Policy.** `policy_adaptive` selects SRTF/Adaptive (1) or SRTF (0).
* **Reset.** `rst_n` is an asynchronous, active-low reset that clears every
  table.

## Sizes

| parameter | value | origin |
|---|---|---|
| SMs | 15 | GTX 480 configuration used in the evaluation |
| kernel slots | 8 | Fermi limit of concurrent kernels |
| block slots per SM | 8 | Fermi limit |
| threads / registers / shared memory / warps per SM | 1536 / 32768 / 48 KB / 48 | Fermi limits |
| sharing-mode residency limit | 3 | SRTF/Adaptive |
| fairness threshold | 0.5 | SRTF/Adaptive |
| cycle counters | 32 bit | this design |
| block counts and indices | 16 bit | this design |

The evaluated kernels all fit. They are eight ERCBench kernels with 512 to
4096 blocks, residency 5 to 8, 61 to 256 threads per block, and runtimes up
to 22.2 M cycles (SHA1), below the 4.29 G limit of the cycle counters. The
evaluated workloads are two programs at a time, against 8 kernel slots.

## Departures from the original description and choices made here

* **Slice boundaries.** The prose says launches and ends start a slice for
  all running kernels. The pseudo-code's launch handler marks only the
  launched kernel. This design follows the prose.
* **`Block_Start`** is stored per SM block slot instead of per kernel and
  slot. It holds the same information.
* **`Active`** counts cycles with a *block* resident, not a *warp* running.
  Warps are not visible at the scheduler.
* **Sample size.** A sample is taken after the first block of the sampled
  kernel ends. The original only says "a sufficient number" of blocks.
* **Direct start and early end of sampling.** The direct start of a kernel
  when nothing else can issue, and the early end of sampling, are
  this design's rules.
* **Ties** in remaining time go to the lower kernel slot. A kernel without a
  prediction counts as longest.
* **SRTF/Adaptive is partial.** The original also estimates runtimes *in*
  sharing mode (from the blocks of the slower kernel run while sharing and
  while alone) to monitor fairness. That monitoring is not built: the
  decision is re-evaluated only when the set of runnable kernels changes.
  The slowdowns are computed from remaining-time predictions at that moment,
  taken from SM 0.
* **R** is computed with no register-allocation granularity.
* **Issue rate** (one block per cycle), the handshakes and one-cycle event
  latencies are this design's choices. The original scheduler was a
  functional model inside a simulator.
* The FIFO and MPMax policies the original compares against are not part of
  this design.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tbs_pkg.sv \
          tb/tbs_top_tb.sv --top-module tbs_top_tb -Mdir obj -o sim
./obj/sim
```

| testbench | what it checks |
|---|---|
| `occupancy_calc_tb` | R against a per-resource minimum, with the benchmark kernels' R values |
| `sm_resources_tb` | random allocate/free traffic against a reference slot table |
| `ss_predictor_tb` | each event, `t` re-measured only at slice starts, the prediction formula, copy, residency change |
| `srtf_sampler_tb` | direct start, FIFO sampling, hand-over, early end, block counts, kernel end, slot reuse |
| `adaptive_ctrl_tb` | fairness verdict against a floating-point slowdown reference, mode entry/exit |
| `kernel_select_tb` | the three selection rules, against a reference ranking |
| `tbs_top_tb` | whole scheduler at full size. Every mechanism must occur: direct start, sampling, hand-over, hand-off, sharing. Checks each block issued once, residency limits, and that the short kernel finishes first under SRTF |
| `workload_pair_tb` | two evaluated workloads at full grid size (see below) |
| `tbs_stress_tb` | 60 random kernels, up to 8 live at once, policy toggled during the run. Checks each block issued once, R and SM resources never exceeded, each kernel ends once after all its blocks. Sampling, hand-over, sharing and switch-back must all occur |

`workload_pair_tb` runs RayTracing + JPEG-d under SRTF. The grids have 2048
and 512 blocks, with mean block durations of 15167 and 5238 cycles.
JPEG-d arrives second. It finishes after about 36.5 k cycles. Alone it
needs about 27 k cycles in this model: 5 steps of one block duration. The
difference is one sampling delay plus part of a hand-off delay. Under FIFO,
JPEG-d would wait about 440 k cycles for RayTracing.

The same testbench runs AES-d + AES-e under SRTF/Adaptive. The two kernels
are of nearly equal length, so the fairness check enters sharing mode and
both kernels progress together. The whole testbench simulates about 900 k
cycles in under 10 s.

## How far to trust it

* All modules pass lint and elaborate cleanly.
* Each testbench was also run against a deliberately broken copy of its
  module, and it failed there.
* The SM model is crude: fixed block durations with ±5 % jitter, and no
  interference between co-running kernels. The testbenches therefore
  check that the scheduling works as described. They do not reproduce the
  throughput or fairness figures of the original evaluation.
* Full-size synthesis of `tbs_top` is slow. There are 15 copies of the
  predictor, each with 8 kernels' state and a 48-bit multiplier.
