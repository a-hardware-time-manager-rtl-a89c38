# Hardware time manager for a periodic real-time kernel

A real-time kernel such as Xenomai, running next to Linux, normally keeps time
in software. A hardware timer interrupts the CPU every tick (10 ms in a
typical set-up). On each tick the kernel advances its time variable and walks
the list of sleeping tasks to see whose delay has run out. The cost of that walk
grows with the number of tasks, and it is paid on every tick, whether or not any
task is due. The tick length also limits how precisely a task can be woken.

This design moves that work into a small piece of logic next to the CPU, an
FPGA in the original prototype. It does two things:

* **it keeps the system time**: a 64-bit counter that advances once per clock
  cycle, so one tick is one clock period (9.8 ns at 102 MHz);
* **it keeps one down-counter per sleeping task**: the kernel loads a task's
  counter with its delay in ticks. All counters run down in parallel. When
  one reaches zero, the block raises an interrupt line and holds it until the
  kernel acknowledges the wake-up.

The CPU is therefore interrupted only when some task actually has to wake. It
never has to scan a timer list, and wake-ups are timed to the clock cycle
instead of to a 10 ms tick.

The kernel sees five operations:

| operation        | meaning                                            |
|------------------|----------------------------------------------------|
| `GetTime`        | read the 64-bit system time                        |
| `SetTime(t)`     | overwrite the system time                          |
| `TaskDelay(k,n)` | put task `k` to sleep for `n` ticks                |
| `GetTasksToWake` | read which tasks are due (one bit per task)        |
| `ClearTask(k)`   | acknowledge that task `k` has been woken           |

A periodic task's `wait_period()` becomes `TaskDelay(self, period)` followed by
a suspend. The interrupt handler calls `GetTasksToWake`, and then, for each
task in the bitmap, calls `ClearTask` and makes the task ready.

## Block structure

```
                 +------------------------- time_manager_top --------------------------+
 processor bus   |  +-----------+  set_en/set_value   +-------------+                  |
 bus_cs/we/addr  |  |           |-------------------->| system_time |  time            |
 bus_wdata  ---->|  | tm_regif  |<--------------------|  (64-bit up)|                  |
 bus_rdata  <----|  | register  |                     +-------------+                  |
 bus_rvalid <----|  | interface |  delay_en/task/ticks +---------------------------+   |
                 |  |           |--------------------->| waiting_tasks_array       |   |
                 |  |           |  clear_en/task       |  task_counter x NUM_TASKS |   |
                 |  |           |--------------------->|  wake[] ---- OR ---> reg |---+--> irq
                 |  |           |<---------------------|          wake bitmap      |   |
                 |  +-----------+                      +---------------------------+   |
                 +----------------------------------------------------------------------+
```

All blocks share one clock and one synchronous active-low reset `rst_n`.

### `system_time`: the clock of the kernel

This is a plain `CNT_W`-bit up-counter, zero after reset. A `SetTime` loads
it, and counting continues from the loaded value on the next edge. It wraps
modulo 2^`CNT_W`. At 64 bits and 102 MHz it wraps only after about 5,700 years.

### `task_counter`: one sleeping task

Each task owns one of these. Its behaviour is the core of the design and has
the most corner cases:

* **Load.** `load` with `ticks = T` on clock edge *E* sets `count = T` and `active = 1`.
* **Count.** On every following edge the count drops by one.
* **Expiry.** On the edge where the count steps from 1 to 0, `active` falls
  and `wake` rises. So `wake` is first high exactly *T* edges after *E*. The
  counter then stops at zero; it does not reload itself. A load of 0 is
  treated like a load of 1, because a wake-up cannot happen in the same
  cycle as the request.
* **Acknowledge.** `wake` is sticky. It stays high until `clear`, however long
  the CPU takes.
* **Collisions.**
  * If `clear` arrives on the same edge as a new expiry, the expiry wins, so a
    fresh wake-up is never lost.
  * A `load` while the counter is still running restarts the delay.
  * A `load` does not clear a pending `wake`. Only `ClearTask` does.

Each counter has a comparator (`count <= 1`) and a decrementer. Apart from the
task-id decoder, the counters share no logic.

### `waiting_tasks_array`: all tasks and the interrupt

This block holds `NUM_TASKS` task counters (12 by default, which is the size of
the prototype). It decodes the task id of a `TaskDelay` or `ClearTask` into a
one-hot load or clear, and ignores ids of `NUM_TASKS` or more. One delay and
one clear may arrive in the same cycle. The `wake` flags form the bitmap that
`GetTasksToWake` returns.

`irq` is a flip-flop holding the OR of all `wake` flags. It rises one edge
after the first flag and falls one edge after the last flag is cleared. It is
a level signal: if a second task expires while the first is still waiting to
be acknowledged, `irq` simply stays high. The handler sees both tasks in the
bitmap, or sees the second one on its next pass.

### `tm_regif`: the register interface

The CPU reaches the block through memory-mapped registers on a simple
synchronous bus:

* **Access.** One access is one cycle with `bus_cs` high. `bus_we` selects a write.
* **Read data.** Read data is registered and appears in the next cycle together with `bus_rvalid`.
* **No wait states.** Every cycle can carry an access.

Word addresses (`tm_pkg::tm_reg_e`):

| addr | name         | dir | function                                                          |
|------|--------------|-----|-------------------------------------------------------------------|
| 0    | `TIME_LO`    | R   | time[31:0]; also latches time[63:32] of the same sample          |
| 1    | `TIME_HI`    | R   | the latched time[63:32]                                           |
| 2    | `ARG_LO`     | RW  | operand[31:0]                                                     |
| 3    | `ARG_HI`     | RW  | operand[63:32]                                                    |
| 4    | `SET_TIME`   | W   | `SetTime(operand)`; write data ignored                            |
| 5    | `TASK_DELAY` | W   | `TaskDelay(wdata, operand)`: task id in the low bits of the write |
| 6    | `CLEAR_TASK` | W   | `ClearTask(wdata)`                                                |
| 7    | `WAKE`       | R   | `GetTasksToWake`: bit *k* = task *k* is due                       |

Three points are easy to miss:

* **64-bit values on a 32-bit bus.** A 64-bit value does not fit in one bus
  word, so `SetTime` and `TaskDelay` take their operand from `ARG_HI:ARG_LO`.
  The driver writes those two words and then the command register. The operand
  is kept after the command, so a driver that always sleeps for the same
  period can skip re-writing it.
* **Consistent `GetTime`.** Reading `TIME_LO` captures the upper half of the
  same sample into a shadow register, so `TIME_LO` then `TIME_HI` is one
  64-bit value even across a carry. Two back-to-back `GetTime` calls differ by
  exactly 4 ticks: two 2-cycle reads. That difference is the calibration
  offset a driver subtracts when it measures code with `GetTime`.
* **When a command takes effect.** Commands act on the clock edge of the
  write. A `TaskDelay` of *T* written on edge *E* shows up in `WAKE` from
  edge *E+T*, and `irq` is high from edge *E+T+1*.

Assertions in `tm_regif` flag a `TaskDelay` or `ClearTask` for a task id that
does not exist.

## What comes from the original design and what does not

The following come from the original design:

* the split into a system-time counter and an array of per-task counters;
* 64-bit counters;
* one tick per clock;
* 12 tasks;
* counting down once per cycle from the loaded delay;
* a wake-up output held high until the CPU acknowledges it;
* the five operations above, reached through memory-mapped registers.

The original describes the block at that level only. The following are
choices of this RTL:

* the bus protocol, the 32-bit data width and the register map;
* the staged 64-bit operand and the `GetTime` snapshot;
* the exact expiry cycle and the load-of-zero rule;
* how collisions between load, clear and expiry resolve;
* the registered OR for `irq`;
* the synchronous reset. The original clears the time when the FPGA is
  configured.

Anything that depends on these choices, such as a driver's exact register
sequence, is specific to this implementation.

Not part of the RTL:

* the CPU: an i.MX27 in the prototype;
* its bus to the FPGA;
* the kernel driver and the Xenomai patch that calls the operations.

The testbenches model the driver's bus accesses and its interrupt handler.

## Size

With defaults (12 tasks, 64-bit counters), generic synthesis gives:

* **986 flip-flops:**
  * 64 for the time;
  * 12 × (64 count + active + wake) for the tasks;
  * 129 in the register interface;
  * 1 for `irq`.
* **About 300 word-level cells**, mostly twelve 64-bit decrementers and
  comparators.

The FPGA prototype reported roughly 950 flip-flops and just over 3,000 4-input
LUTs for 12 tasks on a Spartan-3A with 1,792 slices, about 90 % of the device.
It also reported proportionally less for 1, 2, 4 and 8 tasks. Logic grows
linearly with `NUM_TASKS × CNT_W`.

Narrower counters (`CNT_W`) are the intended way to fit more tasks:

* 32 bits still give 42 s of delay at 102 MHz;
* up to 32 tasks fit the `WAKE` register.

## Files

| file                           | contents                                          |
|--------------------------------|---------------------------------------------------|
| `rtl/tm_pkg.sv`                | register map enum and bus constants               |
| `rtl/system_time.sv`           | system time counter                               |
| `rtl/task_counter.sv`          | one task's delay counter and wake flag            |
| `rtl/waiting_tasks_array.sv`   | `NUM_TASKS` counters, id decoding, `irq`          |
| `rtl/tm_regif.sv`              | bus register interface                            |
| `rtl/time_manager_top.sv`      | the assembled time manager                        |
| `tb/tb_<module>.sv`            | self-checking testbench of each module            |
| `tb/tb_periodic_workload.sv`   | periodic task sets, see below                     |
| `tb/tb_task_count_variants.sv` | the top at 1, 2, 4 and 8 tasks                    |

Parameters:

* `NUM_TASKS = 12`, the prototype's size
* `CNT_W = 64`, the prototype's counter width
* `DATA_W = 32`, the bus width chosen here
* `ADDR_W = 3`, enough for the eight registers

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog if it hangs.

* `tb_system_time`: counting, `SetTime`, wrap-around and reset against a
  reference counter.
* `tb_task_counter`: measures the edges from load to `wake` for delays 0, 1,
  2, 3, random values and one above 2^32. Also covers the sticky flag, clear,
  the clear/expiry collision, restart and reset.
* `tb_waiting_tasks_array`: 5,000 cycles of random delays and clears, with
  out-of-range ids. Checked every cycle against a model that records each
  task's due edge.
* `tb_tm_regif`: the register map, read latency, the `GetTime` snapshot and
  exactly one command strobe per command write.
* `tb_time_manager_top`: the whole block at its default size.
  * A bus-level model checks `irq` every cycle and checks every `GetTime`
    and `WAKE` read.
  * It runs one complete delay → interrupt → bitmap → acknowledge sequence
    with the exact cycle count.
  * It checks the 4-tick calibration offset.
  * It then runs 12 periodic tasks under a modelled interrupt handler.
  * It counts, and requires at least once, each of these: `GetTime`,
    `SetTime`, `TaskDelay`, a restarted delay, an interrupt, a bitmap with
    several tasks, an expiry while `irq` is already high, `ClearTask`, and a
    time read across a 32-bit carry.
* `tb_periodic_workload`: task sets of 1, 2, 4, 8 and 10 tasks with periods
  of 1000, 40, 13 and 10 ms, one second each.
  * Time is scaled to 102 ticks per ms instead of 102,000, to keep the run
    short. The design itself runs at full size.
  * All tasks of a set share a phase. The handler re-arms each task relative
    to its previous due time.
  * It checks that each task wakes exactly 1000/period times and that there
    is one interrupt per period.
  * It prints an estimated software-to-hardware CPU overhead ratio. This
    ratio uses measured handler costs from the prototype: 136.09 + 6.79·n µs
    per 10 ms software tick, against 8.502 + 0.168·n µs per hardware
    interrupt. The interrupt count is the one simulated here.
  * Results: about 1,650–2,000 at 1000 ms and 66–80 at 40 ms. At 13 ms and
    10 ms the same formula gives 22–26 and 16–20, somewhat below what the
    prototype's evaluation reported for those two periods.
* `tb_task_count_variants`: the top at 1, 2, 4 and 8 tasks, the other sizes
  the prototype was built in. For each, every task in turn is delayed, woken
  and acknowledged.

To run one with plain Verilator from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/tm_pkg.sv \
    tb/tb_time_manager_top.sv --top-module tb_time_manager_top -Mdir obj
./obj/Vtb_time_manager_top
```

## Changing it

* **Fewer or more tasks, narrower counters.** Set `NUM_TASKS` and `CNT_W` on
  `time_manager_top`. `NUM_TASKS` may be at most `DATA_W`. `CNT_W` may be at
  most `2*DATA_W`. Narrower counters still use the same two operand words;
  the upper bits are ignored.
* **A different bus.** Only `tm_regif` knows the bus. Replacing it leaves the
  counters untouched. Its outputs are single-cycle command strobes, and its
  inputs are the time and the wake bitmap.
