# IR-drop-aware SRAM PIM core: weight distribution shift and the IR-Booster

A digital SRAM processing-in-memory (PIM) macro fires thousands of adder cells
in the same cycle, and the resulting current pulls the local supply down
(IR-drop). Sizing the supply for the worst possible switching costs power and
speed, yet the real switching depends on data that is largely known before
run time: the weights sit in the array for the whole operator, and a bank can
only toggle where a stored bit is 1. The fraction of 1 bits in a macro's
weights (its *hamming rate*, HR) is therefore an upper bound on the fraction
of cells that can toggle in any cycle (the *toggle rate*, R_tog).

This RTL builds the hardware side of that idea:

* **Weight distribution shift (WDS).** Small negative INT8 weights are full of
  1 bits in two's complement. Storing every weight of a macro as W + delta
  (delta = 2^k) moves most of them to small positive values and lowers HR. A
  per-macro *shift compensator* removes the error exactly, in a pipeline stage
  that does not lengthen the MAC path.
* **IR-Booster.** Each Macro Group (macros sharing one supply and clock) has a
  table of voltage-frequency pairs, each signed off for a toggle-rate level.
  From the group's HR the controller knows a *safe* level; it then runs at a
  more *aggressive* level, watched by a ring-oscillator IR monitor. When the
  monitor reports a failure, the group falls back to the safe level, its busy
  macros recompute, and the other macros of the same operator stall so that
  nothing is corrupted. The aggressive level adapts: it backs off after
  repeated failures and creeps forward after long quiet periods.

The design is split over twelve SystemVerilog files in `rtl/`, one module or
package per file, with a self-checking testbench per module in `tb/`.

## Organisation of the core (`aim_chip`)

```
            host: weights, inputs, start, macro_cfg, mode, beta, threshold
                                  |
   +------------------------------+------------------------------------+
   | Macro Group 0      ...       Macro Group 15                       |
   |  4 x pim_macro               4 x pim_macro                        |
   |  ir_monitor <- ro_clk[0]     ir_monitor <- ro_clk[15]             |
   +------------------------------+------------------------------------+
        | ir_fail, busy                          ^ stall, recompute
        v                                        |
   booster_controller: per group safe_level_select, level_adjuster,
                       vf_pair_select  -> group_vf (to regulator / clock)
        |
   set_accumulator: adds the results of all macros of one Set
```

Defaults: 16 groups x 4 macros = 64 macros; each macro has 32 banks of 64
rows of signed 8-bit weights and takes signed 8-bit inputs bit-serially.

Tasks are assigned per macro by a compiler, which passes the result in
`macro_cfg` (one entry per macro, type `macro_cfg_t` in `aim_pkg`):

| field       | bits | meaning                                                     |
|-------------|------|-------------------------------------------------------------|
| `valid`     | 1    | the macro holds a task                                      |
| `dyn_op`    | 1    | input-determined operator (e.g. attention scores): HR unknown |
| `set_id`    | 6    | logical Set: the macros that compute one operator together   |
| `hr_pm`     | 10   | HR of the macro's weights in per mille                       |
| `wds_en`    | 1    | weights were stored shifted                                  |
| `wds_shift` | 3    | k, with delta = 2^k                                          |

The whole core runs on one clock. `group_vf` is the code of the V-f pair each
group should run at; turning it into a voltage and a clock frequency is the
job of the regulators and clock generators, which are outside this RTL. The
ring oscillators are analog too: their outputs enter as `ro_clk`.

## The PIM macro (`pim_macro`, `pim_bank`, `pim_shift_adder`)

A macro computes `mac[b] = sum_k x[k] * W[b][k]` for all 32 banks at once.
The input vector (`in_we`/`in_data`, held in an input buffer) is streamed one
bit per cycle, least significant bit first, to the word lines of all banks.
Each bank ANDs the bit with its 64 weights and sums them in an adder tree
(`pim_bank`, combinational). The shift adder (`pim_shift_adder`) weights the
partial sum by 2^t and subtracts it for the sign bit, so inputs are signed
two's complement.

Timing: the cycle `start` is sampled starts the pass; bit t is applied in
stage 0, its registered partial sum is corrected and accumulated in stage 1;
`done` rises IN_BITS+1 = 9 clock edges after the start edge and `mac` stays
valid until the next pass. `busy` covers the whole pass.

* `stall` freezes every pipeline register: partial sums are kept, and the
  pass ends `n` cycles later for `n` stalled cycles.
* `recompute` throws the partial sums away and restarts at bit 0 from the
  input buffer. The controller issues it after a V-f change.

## Shift compensation (`shift_compensator`)

With weights stored as W + delta, the bank computes for bit t
`sum_k I_k,t * (W_k + delta) = exact + delta * sum_k I_k,t`. The error term
is the same for every bank, since all banks see the same input bits. So one
unit per macro counts the input bits with its own adder, shifts the count by
k, negates it (`~x + 1`) and registers it. In the next cycle the registered
correction is added to each bank's registered partial sum, before the shift
adder. The result is bit-exact. The offline step is not built: it shifts the
weights and clamps any that would exceed +127. A clamped weight gives the
result for the clamped value minus delta, as it does in any WDS
implementation. The testbenches check both cases.

## Levels and V-f pairs (`aim_pkg`, `safe_level_select`, `vf_pair_select`)

A *level* is a toggle rate in percent for which V-f pairs have been signed
off. The table has five voltages V1 (highest) to V5 and five frequencies f1
(lowest) to f5. Pair (Vi, fj) belongs to the level

    level = 60% - 5% * ((i - 1) + (j - 1))

so 60% is only V1-f1, while 40% can be V5-f1, V4-f2, V3-f3, V2-f4 or V1-f5.
A lower level is more aggressive: it means a lower voltage or a higher
frequency. Level 100% stands for the conventional worst-case DVFS pair.

`safe_level_select` takes HR_G, the worst HR of the group's valid macros. It
rounds HR_G up to the next 5% step (47.5% gives 50%), with a floor of 20%. The
result is 100% when HR_G exceeds 60% or any macro runs an input-determined
operator. The initial aggressive level comes from a fixed table:

| safe level | 100 | 60 | 55 | 50 | 45 | 40 | 35 | 30 | 25 | 20 |
|------------|-----|----|----|----|----|----|----|----|----|----|
| a-level0   | 60  | 40 | 35 | 35 | 35 | 30 | 30 | 25 | 20 | 20 |

`vf_pair_select` picks the pair within a level:

* **Sprint mode** takes the highest frequency available.
* **Low-power mode** takes the lowest voltage available.
* **After an IRFailure** it keeps the current frequency where the new level
  has a pair at it. The voltage is raised instead, so the Set's frequency
  does not change.

## The level algorithm (`level_adjuster`)

This is the hardest part to follow. Each group has a level (the one in use),
an a-level (the aggressive target) and a counter of quiet cycles,
SafeCounter. The step width is 5% and `beta` is programmable. Every cycle
one of the following applies:

1. **IRFailure.** The level jumps to the safe level. If SafeCounter is below
   0.2*beta, the previous failure was too recent, so the a-level is moved
   down one step (+5%), at most to the safe level. SafeCounter is then
   cleared.
2. **Set synchronisation.** This applies when another group of a shared Set
   failed. The level is set to the level the controller hands over, and
   SafeCounter is cleared.
3. **Otherwise** SafeCounter counts up:
   * when it reaches beta, the level returns to the a-level;
   * when it passes 2*beta, the a-level moves up one step (-5%, at least
     20%), the level follows it, and SafeCounter is set back to beta.
     Another beta quiet cycles then allow the next step.

A small beta makes the group chase lower levels faster. It gains more, but
fails more often. `init` (pulsed once after `macro_cfg` is written) loads
a-level0 and starts at it.

## The controller (`booster_controller`)

The controller handles all groups together, because Sets span groups:

* A failure of group g is taken as a failure of each busy valid macro of g.
  Each such macro is held (`macro_stall`) for ADJ_CYCLES = 4 cycles, while the
  group's V-f pair changes. It then gets a one-cycle `macro_recompute`.
* Every other busy macro in a Set that contains a failing macro is stalled
  for the same 4 cycles. It keeps its partial sums and does no extra work.
* The groups of those macros synchronise their level to the Set level. This
  is the highest safe level among the failing groups of the Set, and never
  below the group's own safe level.
* Macros of other Sets are not disturbed.

The new pair is registered one cycle after the level changes.

## The IR monitor (`ir_monitor`)

The sensor is a ring oscillator on the group's supply rail: when the supply
droops, it slows down. The digital part counts ring edges with a Gray-coded
counter in the ring's own clock domain. It carries that count into the core
clock through two flip-flops, which is safe because only one bit of a Gray
code changes at a time. Every 16 core cycles it compares the edges seen in
the window with `ir_threshold`. Too few edges give a one-cycle `ir_fail`
pulse. An IRFailure is therefore seen up to one window after the droop
begins; windows are 16 cycles long.

## Set accumulation (`set_accumulator`)

An operator split over several macros needs their results added.
`acc_start` with `acc_set` walks over all macros, one per cycle, and adds the
bank results of the macros of that Set. `acc_done` rises 64 cycles later, and
`acc_sum` then holds the Set totals.

## Where this design departs from the paper, or fills gaps

* **Direction of a level step.** The paper's text says the a-level is
  "increased by 5%" when moving to a more aggressive point. Its V-f figure
  and its table of initial levels both put aggressive levels at lower
  percentages. Here "up" is -5%.
* **The example pairs for 50%.** The text lists V3-f1, V4-f2, V5-f3, but the
  printed table has V3-f1, V2-f2, V1-f3 at 50%. The table is followed.
* **Sizes the paper does not give:** 64 rows per bank, a monitor window of 16
  cycles with an 8-bit count, ADJ_CYCLES = 4, and 16-bit beta. The bank count
  (32) is the smallest the paper mentions.
* **The 20% floor.** Groups with HR_G below 17.5% are given the 20% level,
  because the table has no lower pairs.
* **How Sets synchronise.** The paper requires all macros of a Set to share a
  frequency. The rule that picks the synchronised level is this design's.
* **One clock.** The core uses a single clock, and V-f pairs are output codes.
* **Not built.** The regulators, clock generators, ring oscillators, RISC-V
  control cores and on-chip memories are not part of this RTL. Neither are
  the compiler steps: HR-aware quantisation, the weight shift itself, and
  HR-aware task mapping.

## Capacity against the evaluated networks

At the default size the core holds 64 x 32 x 64 = 131,072 INT8 weights. Every
network in the paper's evaluation is far larger: ResNet18, MobileNetV2,
YOLOv5, ViT, GPT2 and Llama3.2-1B range from about 3.5 million to 1.2 billion
weights (general figures, not the paper's). They run as tiles, with weights
reloaded between tiles, and that traffic is outside this core.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops by
itself. They are built with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/aim_pkg.sv tb/tb_aim_chip.sv \
    --top-module tb_aim_chip -Mdir obj_aim_chip -o sim && obj_aim_chip/sim
```

| testbench               | what it covers                                                        |
|-------------------------|-----------------------------------------------------------------------|
| `tb_pim_bank`           | adder tree against a reference                                        |
| `tb_pim_shift_adder`    | signed bit-serial accumulation, hold and clear                        |
| `tb_shift_compensator`  | correction value, hold and clear                                      |
| `tb_pim_macro`          | results with and without WDS and clamping, latency, stall, recompute  |
| `tb_ir_monitor`         | failure flag against a ring model at nominal and drooped supply       |
| `tb_safe_level_select`  | every HR value, fallback, table of initial levels                      |
| `tb_vf_pair_select`     | every level, both modes, keep-frequency rule                          |
| `tb_level_adjuster`     | random failures and syncs against a transcription of the algorithm     |
| `tb_booster_controller` | stall, recompute, Set sync, isolation of other Sets                   |
| `tb_set_accumulator`    | Set totals and latency                                                |
| `tb_aim_chip`           | whole core at 4 groups, 16 rows and 4 banks, with supply droops        |
| `tb_aim_chip_full`      | the same test at default size                                          |

`tb/ring_osc_model.sv` is a behavioural ring oscillator for the tests. Its
period grows as its supply input falls.

The end-to-end tests drive a mapping modelled on the paper's Set example:

* Set 0 spans several groups and uses WDS.
* Set 1 holds an input-determined operator and one empty macro.

The tests drop a group's supply at random while the group runs below its safe
level. Every macro result and every Set total is compared with a reference.
The tests count each mechanism and fail if any never occurred:

* IRFailures;
* recomputes;
* stalls;
* Set syncs;
* level steps down and up;
* returns to the a-level;
* the DVFS fallback;
* both boost modes;
* WDS-corrected results;
* Set accumulations.

The default-size test builds slowly, in about ten minutes, because the core
keeps 1 Mbit of weights in flip-flops. It then runs in seconds.
