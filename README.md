# PCSTALL: predicting frequency sensitivity from wavefront PCs for fine-grain GPU DVFS

On-chip voltage regulators and voltage-adaptive clock generators can now
change a GPU compute unit's voltage and frequency within nanoseconds. That
makes DVFS epochs of about 1 µs practical. At that time scale a DVFS
controller can no longer assume that the next epoch will look like the last
one. A GPU compute unit (CU) interleaves about 40 wavefronts, each at its own
point in the kernel, so how much an epoch speeds up with frequency swings a
lot from one epoch to the next. A *reactive* controller, which applies the
last epoch's measurement to the next epoch, guesses wrong much of the time.

The design here *predicts* instead. GPU kernels are short loops executed by
many wavefronts. An epoch's sensitivity to frequency therefore depends mostly
on which instructions the wavefronts run, and that is given by their program
counters (PCs) at the start of the epoch. So each wavefront's sensitivity is
measured after every epoch and stored in a small table indexed by the PC at
which that epoch began. Before the next epoch, each wavefront looks up its
current PC. The values found are summed into a prediction for the whole CU,
and a DVFS manager turns that prediction into a voltage/frequency (V/f) state.

This is RTL for one V/f domain: the predictor, its counters, the epoch timer
and the frequency decision. The compute unit, the voltage regulator, the
clock generator and the power model are outside it and connect through
ports.

## Sensitivity, and how frequency enters

For frequencies between roughly 1 and 3 GHz, the number of instructions a CU
commits in a fixed-time epoch is close to linear in frequency:

    I(f) = I_0 + S * f

`S` is the epoch's **sensitivity**. A high `S` means compute bound, so a
higher clock buys work. A low `S` means memory bound, so a higher clock only
burns power. Sensitivities add up: a CU's `S` is the sum over its wavefronts,
and a domain's `S` is the sum over its CUs.

Throughout the RTL, frequency is counted in **100 MHz units**. The domain has
ten V/f states: state `k` runs at `(13 + k) * 100 MHz`, which is 1.3 to
2.2 GHz. A sensitivity is therefore measured in "instructions per epoch per
100 MHz".

Epochs are fixed in **time**, not in instructions. The logic runs on the
domain's own clock, so an epoch lasts `(13 + k) * EPOCH_NS / 10` cycles:
1300 cycles at 1.3 GHz and 2200 cycles at 2.2 GHz for the 1 µs default. The
epoch timer reloads this count at every boundary, using the state that the
next epoch will run at.

## Estimating one wavefront: the STALL model

After an epoch, each wavefront's sensitivity is estimated from two counts:

* the cycles it spent stalled at an `s_waitcnt` instruction, waiting for
  memory;
* the instructions it committed.

Suppose memory time does not change with frequency and the remaining "core"
time scales as `1/f`. Then the derivative of the committed work with
respect to `f`, at the measured point, is

    sens = IPC * T_core = (instr / cycles) * (cycles - stall) / f

The two divisions depend only on the V/f state of the elapsed epoch.
`sens_estimator` therefore multiplies by a per-state fixed-point reciprocal
`round(2^28 / (f * cycles))`. The ten constants are computed at elaboration,
so no divider is built.

Wavefronts are issued oldest first. A young wavefront gets only the issue
slots that older ones leave free, so its own counts understate how much of
its code is compute bound. The estimate is scaled by `(1 + rank/64)`, where
`rank` is the wavefront's age rank (0 is the oldest). The principle of an
age correction comes from the original proposal. The formula is this
design's own.

The result is rounded and saturated to 8 bits, one byte per table entry.
For a 1 µs epoch an estimate cannot exceed `cycles/f = 100` before the age
scaling, and 161 after it, so saturation never happens at the default
epoch length.

## The PC-indexed table and its two walks

`sens_table` holds 128 entries of 8 bits. The index is `PC[10:4]`:

* the 4 offset bits put about four 4-byte instructions in one entry;
* 128 entries cover 2 KiB of code, about 512 instructions.

There are no tags, so PCs 2 KiB apart share an entry. Each entry has a valid
bit so that a lookup can tell a miss from a stored zero. Reads are
synchronous, as in an SRAM.

`pcstall_predictor` drives the table from two walks. Each walk visits one
wavefront slot per cycle.

**Update walk (just after each boundary).** At the boundary, every slot's
*starting-PC index register* is copied to an update copy and then reloaded
from the slot's current PC. Over the next 40 cycles, each slot that was
active when the elapsed epoch began gets its estimate written to the entry
of its starting PC. The walk also sums the estimates and the committed
instructions for the DVFS manager. When two wavefronts started at the same
entry, the higher-numbered slot writes last and its value stays.

**Lookup walk (shortly before each boundary).** `LOOKUP_LEAD` cycles (64)
before the boundary, each active slot's *current* PC is looked up. Hits are
added into the CU sensitivity. A miss adds nothing and is counted.

Timeline of one 1 µs epoch at state `k` (`C = (13+k)*100` cycles):

```
cycle 0           boundary: state k applied, starting PCs captured,
                  counters snapshotted and cleared
cycles 1..40      update walk: table written for the previous epoch
cycle 41          estimate sum, instruction sum -> base work I_0
   ...            wavefronts run; counters count
C-1-64            lookup_start
C-64..C-24        lookup walk (40 reads, 41 cycles)
C-23              CU sensitivity ready -> domain sum
C-22              state search starts (up to 10 cycles)
C-1               boundary (epoch_end): chosen state goes to the regulator
```

The walks never overlap: the lead of 64 cycles covers the lookup, the sum
and the search. The shortest epoch (1300 cycles) leaves the update far ahead
of the next lookup. Assertions in the RTL check both.

## Choosing the state

`dvfs_freq_selector` needs the base work `I_0`. The table predicts only
`S`, and the original proposal does not say where `I_0` comes from. Here it
is taken from the last completed epoch:

    I_0 = max(0, I_last - S_est * f_last)

Here `I_last` is the number of instructions that epoch committed, and
`S_est` is the sum of its wavefronts' estimates. In other words, `I_0` is
the part of the work that the STALL model says would not have changed with
frequency.

For every allowed state `k`, the selector forms `I_k = I_0 + S*f_k`. It then
picks the state that minimises one of these objectives per unit of work:

| `objective`      | minimises            | meaning                                              |
|------------------|----------------------|------------------------------------------------------|
| `OBJ_EDP`        | `P_k / I_k^2`        | energy x delay                                       |
| `OBJ_ED2P`       | `P_k / I_k^3`        | energy x delay², for performance-oriented servers    |
| `OBJ_ENERGY_LIM` | `P_k / I_k`          | least energy, limited to states within `perf_loss_q8/256` of the top allowed state's work |

`P_k` is a relative power per state supplied from outside, because the power
model is not part of this design. The allowed range `[min_state, max_state]`
comes from a higher-level power manager that works on millisecond scales.
Ratios are compared by cross-multiplication, at one state per cycle. On a
tie the lower state wins, so a wholly idle epoch (`I = 0`) goes to the
lowest allowed state.

## Modules

| file | role |
|------|------|
| `rtl/pcstall_pkg.sv` | V/f state type, objective enum, per-state constant tables |
| `rtl/epoch_timer.sv` | fixed-time epochs, `lookup_start` and `epoch_end` pulses |
| `rtl/wf_perf_counters.sv` | per-slot stall (32 b) and commit (16 b) counters, snapshotted at the boundary |
| `rtl/sens_estimator.sv` | STALL-model estimate of one wavefront, combinational |
| `rtl/sens_table.sv` | 128 x 8 b table, one read port and one write port, valid bits |
| `rtl/pcstall_predictor.sv` | starting-PC registers, lookup and update walks, CU sum |
| `rtl/dvfs_freq_selector.sv` | objective-driven choice of the V/f state |
| `rtl/pcstall_dvfs_domain.sv` | the domain (top): timer, `N_CU` counter and predictor pairs (or one shared pair), domain sum, `I_0`, selector |

Top-level ports (`pcstall_dvfs_domain`):

* **From each CU, per wavefront slot:** `wf_active`, `wf_pc`, `wf_age_rank`,
  `wf_stall` (stalled at `s_waitcnt` this cycle) and `wf_commit` (committed
  an instruction this cycle).
* **From the power manager:** `power[10]`, `objective`, `perf_loss_q8`,
  `min_state` and `max_state`.
* **To the regulator and clock generator:** `vf_state`, which changes only
  on the cycle after `epoch_end`.
* **Observation ports:** the predicted `sens_domain`, `base_work`, and
  counters of decisions, state changes, table hits, misses and writes.
  The last three are per CU; with a shared table they appear in entry 0.

The defaults are those of the original proposal where it gives one:
* 40 wavefront slots per CU;
* 128 table entries of 1 byte;
* 4 PC offset bits;
* 32-bit stall registers;
* ten states from 1.3 to 2.2 GHz;
* 1 µs epochs;
* one CU per domain, with its own table (`SHARED_TABLE=0`).

The following defaults are this design's own:
* PC width 48;
* commit counter 16 b;
* `LOOKUP_LEAD` 64;
* age shift 6;
* reset state 4 (1.7 GHz, the usual static reference point).

At the defaults the domain synthesises to about 5.1 kbit of flip-flops. Most
of them (3.8 kbit) are the 40 x (32 + 16) bit counters and their snapshots.
The rest is 1 kbit of table plus small constant ROMs.

## Where this departs from, or adds to, the original description

* **Base work `I_0`:** derived from the last epoch as described above. The
  original only states the linear model.
* **Age normalisation:** uses the formula `(1 + rank/64)`. The original says
  only that the estimate is normalised by age.
* **Starting-PC register:** double-buffered, 2 x 40 x 7 bits instead of the
  40 bytes budgeted. This keeps the elapsed epoch's starting PC while the new
  one is captured.
* **Table:** has 128 valid bits on top of the 128-byte budget. A miss adds
  zero to the sum.
* **Update walk:** serial, like the lookup walk. Only the lookup is described
  as serial in the original.
* **Age rank:** taken during the update walk, not at the start of the
  elapsed epoch.
* **Shared tables:** the original allows one table per CU or one shared
  by several CUs. Both are built: the default is one per CU, and
  `SHARED_TABLE=1` gives one table for the whole domain. A shared table
  keeps a single read port and a single write port, so its walks visit
  all `N_CU*40` slots one after another, CU 0 first. `LOOKUP_LEAD` must
  then be at least `N_CU*40 + 16`, which is checked at elaboration. The
  update walk and the lookup walk must both fit in the shortest epoch of
  1300 cycles, so at 1 µs a shared table serves at most 16 CUs. Larger
  domains keep one table per CU. A faster, banked or multi-ported walk
  is not built.
* **Clocking:** one clock. The domain runs on the CU clock. The 4 ns
  regulator transition and any crossing into the fixed-frequency memory
  domain are not modelled.
* **Epoch lengths:** longer epochs (10 to 100 µs) are not supported at the
  default widths. Estimates would saturate the 8-bit entries, and at 50 µs
  and beyond the 16-bit commit counters too. Raising `EPOCH_NS` requires
  widening `SENS_W` and `INSTR_W`.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog. With Verilator 5, for example for the whole domain:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/pcstall_pkg.sv tb/pcstall_dvfs_domain_tb.sv \
    --top-module pcstall_dvfs_domain_tb -o sim
./obj_dir/sim             # +verbose prints each epoch's decision
```

The package must come first on the command line. To run another testbench,
replace the testbench file and `--top-module`.

| testbench | what it checks |
|-----------|----------------|
| `epoch_timer_tb` | epoch lengths of `(13+k)*100` cycles for random states, lookup exactly 64 cycles before the boundary |
| `wf_perf_counters_tb` | snapshots against counts kept in the bench; saturation |
| `sens_estimator_tb` | hand-worked values; 3000 random cases against a real-number formula (±1) |
| `sens_table_tb` | random reads and writes against a reference array, read-during-write |
| `pcstall_predictor_tb` | lookup sums, hits and misses, update writes and sums, latencies of 41 and 40 cycles |
| `dvfs_freq_selector_tb` | chosen state against a real-number search for all three objectives; range clamping; latency |
| `pcstall_dvfs_domain_tb` | the whole domain at default size for 34 epochs, against a full model of the flow (see below) |
| `pcstall_multi_cu_tb` | the same with two CUs in one domain (`N_CU=2`): the domain sum and base work over both tables |
| `pcstall_shared_table_tb` | two CUs sharing one table (`SHARED_TABLE=1`, lead 96): the 80-slot serial walk, entries overwritten across CUs |

The two-CU benches change only `NC`, `SH` and the lead at their top, so
they also serve for larger domains. With 16 CUs sharing one table and a
lead of 656 cycles the shared bench passes. That is the largest shared
domain that fits a 1 µs epoch.

`pcstall_dvfs_domain_tb` drives a small CU model. Forty wavefronts run the
same 160-instruction loop, which has a memory-bound half and a
compute-bound half. At most four instructions issue per cycle, oldest first.
Memory latencies are fixed in nanoseconds.

The bench keeps its own copy of the counters, the starting PCs and the
table, and repeats the lookup walk cycle by cycle. Every epoch it checks:

* the epoch length;
* the domain sensitivity;
* `I_0`;
* the applied state.

It also requires each mechanism to occur at least once:

* table hits, misses and writes;
* rises and falls of the state;
* all three objectives;
* a decision capped by the power manager's range;
* idle wavefront slots.

It runs in well under a second.

## How far to trust it

The testbenches check the RTL against reference models written from the
equations above, so they establish that the RTL does what this document
says. They do not establish that the choices marked above as this design's
own reproduce the accuracy reported for the original mechanism. That
accuracy came from a cycle-level GPU simulator with a calibrated power
model, and neither is reproduced here. The parts to revisit first when
calibrating against a real CU are:

* the `I_0` estimate;
* the age normalisation;
* the behaviour on a miss.
