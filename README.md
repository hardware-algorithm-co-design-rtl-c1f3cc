# A time-window I/O co-processor: RTL for execution time servers and a two-level scheduler

Real-time control code often cares about *when* an I/O operation happens as well as *whether* it
happens. A PWM update, a sensor read or a frame on a field bus can lose most of its value if it
starts a little early or late. When the operating system drives the device, the start time picks up
jitter from interrupts, bus traffic and other tasks. It gets worse when one late task pushes back
every task after it.

This co-processor sits next to the device and takes the timing out of the processors' hands.
Software states *what* to run (a task is a short list of 32-bit I/O operations) and *when* each
group of tasks may run. It does this by configuring **execution time servers (ETSs)**. Each ETS
owns a fixed window of time in every hyper-period. Inside the window its tasks may start, and they
consume the ETS's budget. When the budget runs out, whatever the ETS still has pending is dropped.
That stops a late or overlong task in one window from spilling into the next. Two schedulers are
nested. A global one picks the ETS, and a local one per ETS picks the task. The chosen task's
operations then stream out of an on-chip pool to a protocol translator, which drives the pins.

The RTL here covers:

* the decoder;
* both levels of the scheduler;
* the timers and the time base;
* the I/O pool (SRAM, storer, loader and output queue).

The protocol translator, the on-chip network and the processors are not part of it. The top module
brings out their connections as plain ports.

```
 in_valid/in_data/in_priv                                   op_valid/op_data/op_ready, io_idle
          |                                                              ^
          v                                                              |
      +--------+  st (payload)  +---------+   +------+   +--------+   +------+
      | Mini-D |--------------->| storer  |-->| SRAM |-->| loader |-->| FIFO |
      +--------+                +---------+   +------+   +--------+   +------+
        |    | tpara                                        ^   ^ abort/flush
        |    v                                              |   |
        |  +-----------------------------------------+ job  |   |
        |  | L-SE 0 .. L-SE N-1 (task tables)        |------+   |
        |  |         mux by SID-SCH                  |          |
        |  | G-SE: server containers + comparator    |----------+
        |  +-----------------------------------------+  expire
        | cfg            ^ tick, hyp_start
        +------------> timebase
```

## 1. Instruction word and programming model

Every request is one 32-bit word. A load is a header word followed by its payload words. The field
boundaries are fixed:

| bits    | field   | width | meaning                                            |
|---------|---------|-------|----------------------------------------------------|
| [1:0]   | opcode  | 2     | instruction class                                  |
| [6:2]   | SID     | 5     | ETS the instruction addresses                      |
| [11:7]  | TID     | 5     | task the instruction addresses                     |
| [31:12] | service | 20    | operands (layout below)                            |

The opcode values and the layout of the service field are this design's own (`rota_pkg.sv`):

| opcode | mnemonic | service field                                     | who may issue |
|--------|----------|---------------------------------------------------|---------------|
| 00     | c-type   | [19:18] sub-op, [17:0] value                      | kernel only   |
|        | `c.set`  | sub-op 00: budget λ of ETS SID, in ticks          |               |
|        | `c.enr`  | sub-op 01: start time α of ETS SID, in ticks      |               |
|        | `c.pri`  | sub-op 10: priority of ETS SID (value[7:0])       |               |
|        | `c.hyp`  | sub-op 11: hyper-period length in ticks (SID ignored) |           |
| 01     | `p.ld`   | [19:15] P-Len; P-Len payload words follow         | any           |
| 10     | `i.ld`   | [19:15] P-Len, [14:7] task priority; payload follows | any        |
| 11     | `i.run`  | [14:7] task priority of the pre-loaded task TID   | any           |

`in_priv` marks a word issued in kernel mode. A c-type word that arrives with `in_priv = 0` is
dropped, and `priv_err` pulses. Payload words are never checked for privilege. Once a header is
accepted, the next P-Len words are taken as payload whatever their bits are.

Software uses the co-processor in three phases:

1. **Set-up.** Write `c.hyp`. Then, for every ETS, write `c.enr`, `c.set` and `c.pri`.
   Pre-load the tasks with `p.ld`.
2. **Run time.** Release pre-loaded tasks with `i.run`, or send a new task together with its
   priority using `i.ld`.
3. **Adapt.** Rewrite any ETS parameter at any time. A new start time or budget takes effect the
   next time that timer is reloaded, which is the next hyper-period or the next window. A new
   priority takes effect at once.

A priority of 0 means "not ready" at both levels. For both ETSs and tasks, a larger value wins.

## 2. Execution time servers: two timers per window

This is the part that needs the most care. Each ETS *k* has a **server container** (`rota_sc`)
with a priority register and two identical count-down timers (`rota_timer`). Each timer holds:

* a *reset value*, written by a c-type instruction;
* a *current value*, which counts down.

The current value is reloaded while the timer's active-low `reset_n` input is 0. It drops by one,
and stops at 0, on every rising edge of `trigger`. The timer's `status` output is
`current != 0`.

The time base (`rota_timebase`) divides the clock into **ticks**. The default is `TICK_DIV = 1000`,
which is 10 µs at 100 MHz. It also raises `hyp_start` on the tick that opens each hyper-period.
The two timers are wired as follows:

* **S-Timer (start).** `reset_n = !hyp_start`, so it is reloaded with α at the start of every
  hyper-period. It then counts ticks down to 0.
* **B-Timer (budget).** It is reloaded with λ for exactly one cycle:
  * the cycle after the S-Timer status falls, or
  * the cycle after a hyper-period start when α = 0.

  It then counts ticks down to 0. Its `status` output is the ETS's `budget` signal.

So ETS *k* holds budget over ticks [α, α+λ) of every hyper-period. Windows of different ETSs may
overlap. Priority then decides which ETS gets the device. Budget is time, not work: it runs down on
every tick inside the window, whether or not the ETS is using the device. The cycle after budget
falls, the container pulses `expire`.

The container asks for the device only when three things hold: it has budget, its local scheduler
has a ready task, and its priority is non-zero. It then presents `{valid, SID, priority}`;
otherwise it presents zeros.

Why a one-cycle reload instead of wiring the S-Timer status straight to the B-Timer reset?
Because that level stays 0 for the rest of the hyper-period once the start time has passed. Used
directly, it would hold the B-Timer at its reload value, and the budget would never run down. The
edge detector keeps the link of the original description (the start timer firing reloads the budget timer)
and still lets the budget count.

## 3. Two-level scheduling

### Global scheduler (`rota_gse`)

The N_ETS container requests feed a balanced comparator tree (`rota_prio_tree`). The tree returns
the valid request with the highest priority. A tie goes to the lower SID.

The tree is combinational unless the optional pipeline stage is enabled (section 8). Its result
is registered into `SID-SCH` only when the pool asks for work (`find_next_job`) and some ETS is
eligible. That keeps one decision stable while it is
being used.

### Local scheduler (`rota_lse`, one per ETS)

Each ETS has a task info block (TIB): `TIB_DEPTH` registers, each holding
`{used, TID, P-Len, priority}`. All entries can be read at once. The same comparator tree returns
the ready entry (priority ≠ 0) with the highest priority. A tie goes to the lower slot. The tree
also produces `HasT?`, which feeds the ETS's container.

An entry goes through this life cycle:

| event                               | effect in the L-SE of ETS k                        |
|-------------------------------------|----------------------------------------------------|
| `p.ld` to ETS k                     | entry for TID found or allocated, priority 0 (parked) |
| `i.ld` to ETS k                     | entry found or allocated, priority from the header (ready) |
| `p.ld`/`i.ld` of this TID to another ETS | entry freed here (the task has moved)         |
| `i.run` of a TID that ETS k holds   | priority set from the header (ready)               |
| job of this entry dispatched        | priority cleared; entry kept for the next `i.run`  |
| ETS k's budget expires              | every priority in the TIB cleared                  |
| load with no free entry             | load ignored, `tib_overflow` pulses                |

Because entries stay allocated, a task that is pre-loaded once can be released again in every
hyper-period with one `i.run` word.

### Mux and the job (`rota_se`)

A multiplexer selects the L-SE result by `SID-SCH`. The job `{SID, TID, P-Len}` is issued when all
three of these hold:

* the decision is valid;
* that L-SE still has a task;
* that ETS still has budget.

The same cycle clears the dispatched task's priority in its TIB.

## 4. I/O pool

The pool address is 12 bits: `{TID (7 bits), release order (5 bits)}`. The 4096 × 32-bit SRAM
(`rota_sram`) holds up to 31 operations per task.

* **Storer** (`rota_storer`). It writes each payload word at `{TID, n}` one cycle after the
  decoder issues it.
* **Loader** (`rota_loader`). It takes a job when it is idle and P-Len ≠ 0. It then reads
  addresses `{TID, 0 … P-Len-1}` through the second port. One cycle later it pushes each word into
  the FIFO. Reads are issued only while the FIFO has room for the word in flight. At full speed, a
  job of P-Len operations takes P-Len + 2 cycles.
* **FIFO** (`rota_fifo`). It is a show-ahead queue with `FIFO_DEPTH = 32` entries and a flush
  input. Its head is the `op_valid`/`op_data` output, and `op_ready` pops it. Assertions catch
  overflow and underflow.

With these defaults the queue holds a whole task (32 > 31), so the loader never stalls inside the
full design. Its back-pressure path is still exercised in its own testbench with a smaller queue.

## 5. When the next job is chosen, and when a job is killed

Scheduling is **non-preemptive**. The top module raises `find_next_job` when all of these hold:

* the loader is done;
* the queue is empty;
* the translator reports `io_idle`;
* no decision or job is in flight.

From there the timing is fixed. The job is valid one cycle after `find_next_job`. Its first
operation is at `op_valid` three cycles after that. So a window of α ticks opens at most a few
clock cycles late, provided the device was idle. It is later only if a job started before the
window is still running.

**Termination.** When ETS k's budget runs out:

* its L-SE clears all of its ready tasks, which are dropped for this hyper-period;
* if the job being loaded or queued belongs to ETS k, the loader is aborted and the queue is
  flushed.

Either way, `terminated` pulses. An operation that the translator has already accepted is not
recalled. Only the queued remainder is discarded.

## 6. Latency summary

The figures below are for the default build (`SCH_PIPE = 0`). With the pipeline on,
`find_next_job` can rise up to four cycles later.

| path                                          | cycles |
|-----------------------------------------------|--------|
| instruction word → TIB / ETS register updated | 2 (decoder register, then target register) |
| payload word → SRAM written                   | 2      |
| `find_next_job` → `job.valid`                 | 1      |
| `job.valid` → first `op_valid`                | 3      |
| operations per cycle while loading            | 1      |
| budget reaches 0 → `expire` / flush           | 1      |
| tick period                                   | `TICK_DIV` clocks |

## 7. Parameters

| parameter    | default | origin |
|--------------|---------|--------|
| `N_ETS`      | 8       | the configuration evaluated in the original work |
| SRAM         | 4096 × 32, 12-bit address (7-bit task, 5-bit order) | original work |
| instruction  | 32 bits: 2 opcode, 5 SID, 5 TID, 20 service | original work |
| `TIB_DEPTH`  | 8       | own choice |
| `FIFO_DEPTH` | 32      | own choice |
| `SCH_PIPE`   | 0       | optional comparator pipeline stage (section 8) |
| `TICK_DIV`   | 1000 (10 µs at 100 MHz) | own choice; the clock rate is the original prototype's |
| time fields  | 18 bits (up to 262,143 ticks, 2.6 s at 10 µs) | own choice |
| priorities   | 8 bits  | own choice |

`TICK_DIV` must be at least 2, because the timers count rising edges of the tick; an initial
assertion checks this. With the defaults, a 1440 ms hyper-period is 144,000 ticks, which fits in the
18-bit fields.

## 8. Where this RTL departs from, or adds to, the original description

* **Encodings.** The opcode values, the c-type sub-ops and the service-field layout are this
  design's own. `c.pri` (ETS priority) and `c.hyp` (hyper-period length) are additions. The
  original gives the ETS priority a register but names no instruction to write it, and it does not
  say how the hyper-period is set. The original also calls the timer write `c.cfg` in one place;
  here that is `c.set`/`c.enr`. All c-type words need kernel mode, not only `c.set`.
* **Task-ID width.** The instruction has a 5-bit TID field, but the pool address has a 7-bit TID
  part. The instruction field is zero-extended, so only 32 of the 128 pool task slots can be
  reached. The top two address bits are therefore constant.
* **Which instructions write the pool.** The original says the storer writes the payload of `p.ld`
  and `i.run`. Here `i.run` carries no payload, since it only releases a pre-loaded task. Payload
  comes with `p.ld` and `i.ld`.
* **B-Timer reload** is an edge rather than a level (section 2). The hyper-period signal is
  produced by a programmable counter, not taken from outside.
* **`find_next_job`, the job-valid condition, TIB allocation and freeing, and the rule that a
  dispatched task goes back to "parked"** are not spelled out in the original. They are this
  design's choices.
* **Termination of a running job.** Flushing the queue and aborting the loader are own choices.
  The original only says the ETS's tasks are terminated.
* **Comparator pipeline.** The original marks a pipeline stage in the comparator trees as
  optional, for large ETS counts. It is built here but off by default (`SCH_PIPE = 0`). At 8 ETSs
  the trees are only three levels deep and do not need it. With `SCH_PIPE = 1`, each tree
  registers its node results halfway to the root. `find_next_job` then also waits until four
  cycles have passed without a tick, configuration, task header, dispatch or termination, so that
  the pipelined decision matches the current state. This adds up to four cycles to the
  job-start latency. Where the stage sits, and the wait rule, are this design's own. The
  end-to-end scenario passes with the pipeline switched on. It does not, however, create the rare
  races the wait guards against, such as a task moved to another ETS in the cycle before a
  decision. The scenario still passes with the wait removed, so that rule is untested.
* **Not included.** The protocol translator (device-specific), the router link and the
  processors are outside this RTL. The offline schedule generator that computes α, λ and the
  priorities is software.

## 9. Files

| file | contents |
|------|----------|
| `rtl/rota_pkg.sv` | widths, opcode/sub-op enums, the structs passed between blocks, pool address |
| `rtl/rota_io.sv` | top level: wiring, `find_next_job`, running-job tracking, abort |
| `rtl/rota_minid.sv` | decoder: header/payload state machine, privilege check |
| `rtl/rota_timebase.sv` | tick prescaler and hyper-period counter |
| `rtl/rota_timer.sv` | count-down timer with reset and current value registers |
| `rtl/rota_sc.sv` | server container: priority register, S- and B-Timer, request filter |
| `rtl/rota_prio_tree.sv` | parameterised max-priority comparator tree |
| `rtl/rota_gse.sv` | global scheduler |
| `rtl/rota_lse.sv` | local scheduler with task info block |
| `rtl/rota_se.sv` | G-SE, the L-SEs and the output multiplexer |
| `rtl/rota_storer.sv`, `rota_sram.sv`, `rota_loader.sv`, `rota_fifo.sv`, `rota_io_pool.sv` | I/O pool |
| `tb/tb_<block>.sv` | self-checking testbench per block |
| `tb/rota_io_scenario.svh` | end-to-end scenario shared by the two top-level benches |
| `tb/tb_rota_io.sv` | scenario with a fast tick (`TICK_DIV = 8`) |
| `tb/tb_rota_io_full.sv` | the same scenario with every top-level parameter at its default |
| `tb/tb_rota_io_pipe.sv` | scenario with the comparator pipeline switched on |
| `tb/tb_rota_prio_tree.sv` | comparator tree, combinational and pipelined, against a reference |
| `tb/tb_rota_io_synth.sv` | random periodic task sets with timing defects, scheduled offline and run end to end |

### The end-to-end scenario

The scenario uses a hyper-period of 40 ticks and runs two hyper-periods. It sets up these ETSs:

| ETS | window | tasks |
|-----|--------|-------|
| 0 | ticks [2, 8) | task A |
| 1 | ticks [10, 30) | B by `i.ld`; C by `p.ld` + `i.run` |
| 2 | ticks [18, 28), overlapping ETS 1 | task E |
| 3 | ticks [30, 34) | task D, 31 operations, too long for its window |

It also:

* releases A, C and D again in the second hyper-period;
* sends a kernel-only word in user mode;
* sends nine loads to the eight-entry TIB of ETS 7.

A model of the device accepts operations with a fixed delay, scaled with the tick length. The bench
then checks the following:

* every operation has the expected content and arrives in order within its task;
* the first hyper-period's jobs come in the order A, B, C, E, D, each dispatched inside its ETS's
  window;
* A's first operation comes within a few cycles of its window opening;
* D is cut short and terminated in both hyper-periods;
* in the second hyper-period only the re-released tasks run;
* the counts of jobs, terminations, privilege rejections, TIB overflows, overlapping-window cycles
  and hyper-periods are all non-zero.

### Random task sets

`tb_rota_io_synth` shows the intended use at larger scale. Each system has n = 4 … 16 periodic
tasks. Their utilisations are drawn with UUniFast, for a total of 0.05·n. Periods are H or H/2,
and deadlines equal periods.

The bench acts as the offline scheduler, using a simple greedy rule of its own rather than a
quality-optimising algorithm:

* It lays the jobs of one hyper-period back to back in release order.
* It cuts them into gap-free groups of at most eight jobs.
* It gives each group one ETS. The window opens at the group's first job, and the budget is the
  group's length plus a short guard.

Every job is pre-loaded once with `p.ld` and released with `i.run` at each hyper-period start.
After that the hardware alone decides when each job runs. In the second hyper-period, every other
system has one job whose operations take four times as long.

The bench checks each job against these rules:

* no operation before the job's release, or outside its window;
* the first job of a window starts within 12 cycles of the window opening;
* each later job follows within 12 cycles of the device going idle;
* without a defect, nothing is terminated.

It also checks that the defect leaves no operation past the end of its window, and that the next
window starts at most one stretched operation late.

The bench runs 39 systems with a 64-operation hyper-period. It then runs two systems scaled by
2250, so that the hyper-period is 144,000 ticks: 1440 ms at the default tick. About one job in
eight cannot be placed in eight gap-free windows, or misses its deadline; those are counted and
left out. The whole bench runs in about 15 s.

Every testbench prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.

## 10. Simulating with Verilator

Name the package first, and let Verilator find the other modules in `rtl/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/rota_pkg.sv -y rtl tb/tb_rota_io.sv --top-module tb_rota_io -o sim
./obj_dir/sim
```

Replace `tb_rota_io` with any other bench name. `tb_rota_io_full` runs the same scenario as
`tb_rota_io` at `TICK_DIV = 1000`: two hyper-periods of 40 ticks, about 80,000 clock cycles. It
takes well under a second, as does every other bench except `tb_rota_io_synth`, which takes about
15 s. To lint the design alone:

```
verilator --lint-only -Wall -Irtl rtl/rota_pkg.sv -y rtl rtl/rota_io.sv --top-module rota_io
```

Lint reports a few unused-signal warnings and a note that `abort` is a keyword in other languages.
Both are harmless. Verilator is a two-state simulator. Every state element in `rtl/` has a reset,
except the storage arrays of the SRAM and the FIFO, which are only read after being written.
