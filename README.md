# Reliability-heterogeneous out-of-order multi-core: hardenable components and run-time task mapping

Soft errors flip bits inside a processor's pipeline structures. Making
every structure of every core triple-modular-redundant (TMR) costs too much
area and power. Hardening only some structures removes much of the
vulnerability for a fraction of that cost. Which structures are worth
hardening depends on the application.

This design builds a multi-core in which the cores are identical in ISA
but differ in which pipeline structures are hardened. Each such choice is a
**reliability mode**. A small hardware scheduler then places a mix of
tasks onto those cores. It has two policies:

- minimise power while keeping every task under a vulnerability limit;
- minimise vulnerability while keeping total power under a budget.

The RTL contains:

- the hardenable structures of a four-issue out-of-order core (Alpha 21264
  class), each of which can be built plain or with TMR;
- the ten reliability modes that choose between those two builds;
- a ten-core top with one core per mode;
- the task-to-core mapper.

The fetch unit, execution units and caches of the core are **not** part of
the RTL. Their connections to the hardenable structures appear as ports.

## Component-level TMR

A hardened component (`HARDEN=1`) keeps three complete copies of its state.
The three copies receive identical inputs. Every output bit is voted 2-of-3
by `tmr_voter`: `y = (a&b) | (b&c) | (a&c)`. A single upset in one copy is
therefore never seen outside the component.

The voter also raises `mismatch` whenever the copies disagree. This lets a
testbench, or a future scrubbing controller, see that an upset was masked.
An unprotected component (`HARDEN=0`) holds one copy, and `mismatch` is 0.

Every component is written to the same pattern:

```
for r in 0..2:  if r < (HARDEN ? 3 : 1)  -> state copy r, outputs packed into rep_out[r]
                else                      -> rep_out[r] = 0
tmr_merge: HARDEN ? vote(rep_out[0..2]) : rep_out[0]
```

There is only one voter per output, so the voter itself is a single point of
failure. Triplicating the voters was left out on purpose.

### Fault-injection port

Every component has a fault-injection port: `fi_en`, `fi_rep`, `fi_idx` and
`fi_bitpos`. When `fi_en` is high, the port flips bit `fi_bitpos` of entry
`fi_idx` in copy `fi_rep` at the next clock edge. This mirrors single-bit
soft-error injection. The valid and done bits of the queues can be
addressed too, at bit position = payload width.

An upset in an unprotected component shows up at the outputs. The same
upset in a hardened component is masked and flagged.

## The hardenable structures

Default sizes are those of the reference Alpha-class configuration. The
core instantiates each component with the port counts shown below.

| Module | Structure | Default size | Ports in the core |
|---|---|---|---|
| `reg_file` | physical register file, integer and FP | 256 x 64 bit each | int 8R/6W, FP 4R/4W |
| `rename_map` | architectural-to-physical map, int and FP | 32 entries x 8 bit | 12 lookups, 4 updates |
| `issue_queue` | wakeup/select queue, int and FP | 64 entries each | 4 inserts; 4 (int) or 2 (FP) issues |
| `rob` | re-order buffer | 192 entries | 4 dispatch, 6 complete, 4 commit |
| `load_queue` | load addresses and order check | 32 entries | 2 address, 2 store checks |
| `store_queue` | store address/data, forwarding, drain | 32 entries | 2 writes, 2 forwards, 1 drain |

The port counts are design choices. They follow from the core issuing four
integer and two FP operations per cycle and having two memory ports.

Behaviour worth knowing before changing these modules:

- **Register file.** Reads are combinational and writes happen at the clock
  edge. When two ports write the same register in one cycle, the
  highest-numbered port wins.
- **Rename map.** On reset, architectural register *i* maps to physical
  register *i*. Lookups are combinational. Among same-cycle updates of one
  register, the highest port wins, since it holds the youngest instruction.
- **Issue queue.**
  - Entries hold two source tags with ready bits, a destination tag and a
    32-bit payload.
  - A wakeup broadcast that matches a source tag sets its ready bit. This
    also applies to entries being inserted in that same cycle.
  - Each cycle the ready entries with the lowest slot numbers go to the
    free units (`fu_ready`).
  - Inserts take the lowest free slots. They are accepted only while
    `DISP_W` slots are free.
- **Re-order buffer.**
  - It is a circular buffer. Dispatch must be packed from lane 0, and
    `disp_idx` returns the slots used.
  - A completion sets the entry's done bit.
  - Each cycle, the unbroken run of done entries at the head retires,
    up to `COMMIT_W` of them.
- **Load queue.**
  - A store whose address becomes known is checked against the loads that
    are younger than it and have already executed. Age comes from
    `chk_pos`, the load-queue tail recorded when the store was allocated.
  - A match on the same 8-byte word reports a violation, together with the
    oldest such load.
- **Store queue.** A load searches the stores older than itself. Age comes
  from `fwd_pos`, the store-queue tail recorded when the load was
  allocated. The youngest matching store forwards its data. The ROB's
  commit count marks stores as committed. The head store drains to memory
  once it is both committed and executed.
- **Flush.**
  - `flush` empties the issue queues, the ROB and the load queue.
  - The store queue keeps its committed stores, because they are already
    architectural.
  - This is a full squash; partial (branch) recovery is not modelled.

## Reliability modes

`hrm_pkg::mode_harden()` holds the mode table. A mark means the structure is
built with TMR. RF covers both register files, RM both rename maps, and IQ
both issue queues.

| Mode | RF | IQ | LQ | SQ | RM | ROB |
|------|----|----|----|----|----|-----|
| U    |    |    |    |    |    |     |
| RM1  | x  |    |    |    |    |     |
| RM2  |    | x  |    |    | x  |     |
| RM3  |    | x  | x  | x  |    |     |
| RM4  |    | x  | x  | x  | x  | x   |
| RM5  | x  | x  | x  | x  |    |     |
| RM6  | x  |    |    |    | x  |     |
| RM7  | x  |    |    |    | x  | x   |
| RM8  |    |    |    |    | x  | x   |
| RM9  | x  | x  | x  | x  | x  |     |

`hrm_core #(.MODE(...))` builds one core in a given mode. Its ports are two
packed structs:

- `core_in_t` holds every component input, `flush` and the fault port.
  The fault port adds a component selector `comp`.
- `core_out_t` holds every component output, plus one `mismatch` bit per
  component.

Input `core_en` models a core that is switched off. While it is low, the
core accepts no register writes, map updates, inserts, dispatches,
allocations or issue. Reads and the fault port still work. Power gating
itself is not modelled.

## The multi-core and the task mapper

`hmc_top` builds `NUM_CORES` (default 10) cores, with core *j* in mode
*j* mod 10. The default therefore has one core per mode. The top also
contains one `task_mapper`. When a mapping completes, the cores that
received a task are switched on (`core_active`). All other cores stay off.

The mapper works from two tables, both written through the `cfg_*` port:

- the power overhead of each core, in percent;
- the full-processor vulnerability factor (FPVF) of each
  application on each core, as a 16-bit fixed-point number.

In a real system both tables come from offline fault-injection and power
characterisation. A mix is up to 8 tasks, each naming one of 4
applications.

**Policy 0: vulnerability-constrained power minimisation.**

1. Sort the cores by power overhead once.
2. Walk the tasks in order. Each task takes the first free core in that
   order whose FPVF for the task's application is at most `vul_const`.
3. That core leaves the pool.
4. A task with no acceptable core stays unmapped.

**Policy 1: power-constrained vulnerability minimisation.**

1. For each task, sort the free cores by that application's FPVF.
2. Take the first core that keeps the summed power overhead at or below
   `power_budget`.
3. A budget of 100 % per task is the natural setting. For example, an
   8-task mix gets 800.

**Hardware form.**

- A sort is a rank computation: core *i*'s rank counts the cores with a
  smaller key, or an equal key and a lower index. This takes one cycle and
  gives a stable ascending order.
- The scan then visits one core per cycle.
- A mix of T tasks finishes within 2 + T·(1 + NUM_CORES) cycles, and `done`
  pulses for one cycle.
- The outputs are:
  - per task: whether it was mapped, and to which core;
  - the number of tasks mapped;
  - the summed power overhead and the summed FPVF.

## Timing summary

| Block | Timing |
|---|---|
| Storage components | Read outputs are combinational from the current state. Writes, inserts, allocations and upsets take effect at the rising edge. Reset is asynchronous and active low, and clears all state. |
| Task mapper | Takes `start` in `S_IDLE`, latches the mix, and holds the result until the next `start`. |
| `core_active` | Follows `done` by one cycle. |

## What is and is not modelled

Modelled:

- the hardenable structures with real behaviour;
- TMR with voting;
- the mode table;
- the ten-core arrangement;
- both mapping policies.

Not modelled:

- instruction fetch, branch prediction, the execution units, the L1 and L2
  caches;
- the FPVF/AVF measurements and the power figures themselves. They are
  table inputs here.
- the design-space search that picks the Pareto-optimal modes;
- software checkpointing and its compression.

Choices made here rather than taken from a specification, each of which is
easy to change:

- port counts, payload widths and commit width;
- lowest-slot-first select in the issue queue;
- 8-byte word granularity for memory-order checks and forwarding;
- tie-breaking by lower core index in the mapper;
- one FP and one integer issue queue, each with the full 64 entries;
- the `mismatch` outputs and the fault-injection port.

The ten-core top at full size is large. Each of the ten cores holds 32 k bits
of register-file state per copy, and most modes triplicate some
structures. Generic synthesis of the whole top therefore takes a long time.
Lint and elaboration are quick.

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. The package must
be compiled first:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/hrm_pkg.sv rtl/tmr_voter.sv rtl/tmr_merge.sv rtl/reg_file.sv rtl/rename_map.sv \
  rtl/issue_queue.sv rtl/rob.sv rtl/load_queue.sv rtl/store_queue.sv rtl/task_mapper.sv \
  rtl/hrm_core.sv rtl/hmc_top.sv tb/tb_hmc_top.sv --top-module tb_hmc_top -o sim
./obj_dir/sim
```

What the testbenches cover:

- **`tb_hmc_top`** is the end-to-end test. It runs at full size with no
  parameter changes.
  - It loads illustrative power and FPVF tables. Three entries are anchored
    on published values: mode U at 0 %, RM1 at 70 % and RM2 at 80 % power
    overhead. The most hardened mode is set at 185 %.
  - It maps the five reference workload mixes of Bit-counts, Dijkstra,
    Patricia and SHA under both policies, and checks each result against a
    loop-level reference model.
  - On every switched-on core it then exercises every structure, with a
    one-bit upset in each. The upset must be masked exactly where that
    core's mode hardens the structure.
  - It counts each mechanism, and fails if any mechanism never happened or
    any core was never exercised.
  - Building it with Verilator takes several minutes, because of the
    design's size.
- **The per-component testbenches** drive random traffic against
  scoreboards. They inject upsets into both hardened and unprotected
  instances.
- **`tb_task_mapper`** compares 320 random mappings with the reference
  model and checks the cycle bound.
