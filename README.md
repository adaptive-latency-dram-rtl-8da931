# Adaptive-Latency DRAM timing unit

DRAM timing parameters are set for the worst case. That means the slowest
cell of the slowest chip a vendor ships, running at the highest temperature
the standard allows (85 °C). A DRAM access is slow because charge has to
move through a long, resistive bitline. A cell that starts with more charge,
or leaks less of it, can be sensed, restored and precharged in less time.
Most modules hold more charge than the worst case, and most modules run far
below 85 °C. For most accesses, then, the standard timing is longer than
needed.

Adaptive-Latency DRAM (AL-DRAM) uses that slack. It does not touch the DRAM
chip or its interface. The memory controller keeps several sets of the four
timing parameters that limit an access, one set per DRAM module and
temperature range. It uses the set that fits each module's present
temperature. The four parameters are:

| parameter | interval it guards | physical step |
|---|---|---|
| tRCD | ACT → RD/WR | sensing the opened row |
| tRAS | ACT → PRE | sensing and full restore of the row |
| tWR | end of write data → PRE | writing and restoring the cell |
| tRP | PRE → next ACT | precharging the bitlines |

This repository holds synthesizable SystemVerilog for the controller-side
part of AL-DRAM. That part is the per-module, per-temperature timing-set
table, the temperature classification, and per-bank enforcement of the four
parameters. Each DRAM command is gated through a valid/ready port.

## Structure

```
            temp_c[m] ──► temp_bin_select ──bin[m]──► timing_table ──active[m]──┐
                                                       ▲ cfg_* (software)      │
                                                                               ▼
 req_valid/cmd/module/bank ──────────────────────► aldram ──► bank_timing_checker[m][b]
 req_ready ◄──────────────── (legal for the row state and all timing met) ◄───┘
```

| file | what it is |
|---|---|
| `rtl/aldram_pkg.sv` | timing-set record `timing_t`, command enum `cmd_e`, the standard and 55 °C sets, ns→cycle conversion |
| `rtl/temp_bin_select.sv` | temperature → bin, registered, one per module |
| `rtl/timing_table.sv` | (module, bin) → timing set, software-writable, fixed standard set above the rated range |
| `rtl/bank_timing_checker.sv` | four down-counters per bank and the open-row flag |
| `rtl/aldram.sv` | top: wires the above, one checker per (module, bank), command port |

Default size: one module with 8 banks. That is the evaluated system, one
channel with one rank of DDR3. The temperature bins end at 55 °C and 85 °C,
the two temperatures at which the timing margins were characterised.

## The timing sets

Everything runs in controller clock cycles of 1.25 ns (DDR3-1600). The
package works the numbers out at elaboration time from nanoseconds:

| set | tRCD | tRAS | tWR | tRP | read sum tRCD+tRAS+tRP | write sum tRCD+tWR+tRP |
|---|---|---|---|---|---|---|
| standard (DDR3-1600) | 13.75 ns / 11 | 35 ns / 28 | 15 ns / 12 | 13.75 ns / 11 | 62.5 ns / 50 | 42.5 ns / 34 |
| 55 °C (reduced) | 10 ns / 8 | 23.75 ns / 19 | 10 ns / 8 | 11.25 ns / 9 | 45.0 ns / 36 | 31.25 ns / 25 |

The standard sums, 62.5 ns and 42.5 ns, are the DDR3 figures against which
AL-DRAM's reductions are measured. The single values are the DDR3-1600
speed-bin numbers that give those sums. The reduced set applies the
reductions found safe for every module tested at 55 °C: 27 % (tRCD),
32 % (tRAS), 33 % (tWR) and 18 % (tRP). Those percentages are rounded, so
the reduced times are rounded to the nearest cycle, not up. For example,
13.75 ns × 0.73 = 10.04 ns is taken as 8 cycles = 10 ns. To use a
different clock or speed bin, change `TCK_PS` and the `STD_*_PS` constants
in `aldram_pkg`. Write recovery counts from the end of the write burst, at
`WR_DATA_END` = CWL + BL/2 = 12 cycles after the WR command.

At reset the table holds the 55 °C set in bin 0 (≤ 55 °C) and the standard
set in bin 1 (≤ 85 °C). Software can overwrite either bin for each module
through the `cfg_*` port. A typical use is to load per-module sets found by
profiling. Modules differ widely: a representative module still worked at
85 °C with 24 % less read latency and 35 % less write latency. A module
above the last limit falls into an out-of-range bin. That bin is not stored: it always gives the standard set,
so that no software setting can run a module faster than the standard
beyond its rated temperature.

## How a command is gated

Each bank has four down-counters and a row-open flag
(`bank_timing_checker`):

- ACT loads `rcd_cnt ← tRCD−1` and `ras_cnt ← tRAS−1` and opens the row.
- WR loads `wr_cnt ← WR_DATA_END + tWR − 1`.
- PRE loads `rp_cnt ← tRP−1` and closes the row.
- Every clock, each non-zero counter counts down by one.

A command issued at clock edge *t* with parameter *v* therefore allows the
dependent command at edge *t + v* at the earliest. The bank allows:

- ACT when the row is closed and `rp_cnt` = 0;
- RD/WR when the row is open and `rcd_cnt` = 0;
- PRE when the row is open and both `ras_cnt` and `wr_cnt` are 0.

**Sets latch at issue.** The parameter values are copied into the counters
when a command issues. A change of the active set therefore affects only
commands issued after the change. The change may come from the temperature
crossing a limit or from a table write. An interval already running is
never shortened or lengthened. This makes a bin change safe at any moment,
even with rows open, and needs no draining of the controller.

The checker holds only the four parameters AL-DRAM adapts. The rest of a
DRAM controller's constraints belong to the rest of the controller and are
not checked here. These include tRTP, tCCD, tRRD, tFAW, tWTR, refresh and
rank-to-rank turnaround. Concurrent assertions in the checker flag any
command issued to a bank whose timing is not met.

## Interface and timing of `aldram`

| port | dir | meaning |
|---|---|---|
| `temp_c[NUM_MODULES]` | in | module temperature, whole °C, unsigned 8 bit |
| `cfg_we`, `cfg_module`, `cfg_bin`, `cfg_timing` | in | table write, one entry per clock; writes to bin ≥ `NUM_BINS` are ignored |
| `req_valid`, `req_cmd`, `req_module`, `req_bank` | in | one command per clock from the scheduler |
| `req_ready` | out | the presented command is legal now; it issues on an edge with `req_valid && req_ready` |
| `temp_bin`, `active_timing`, `row_open` | out | status: bin, active set and row state per module/bank |

- `req_ready` is combinational from registers and the request fields. It
  does not depend on `req_valid`, so a scheduler can probe a candidate
  command before committing to it. NOP is always ready. A module or bank
  index out of range is never ready.
- A change on `temp_c` is registered in `temp_bin_select`. Commands issued
  on the second edge after the change use the new set.
- A table write is used by commands issued from the next edge on.
- Reset is asynchronous and active low. Every module starts in the
  out-of-range bin, which uses standard timing, until its temperature has
  been registered. All banks start closed with no interval pending.

There is no hysteresis between bins. DRAM temperature changes slowly (at
most about 0.1 °C per second was measured in a busy server cluster), and a
bin change is harmless because sets latch at issue.

## What was checked

Each module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M`.

- `tb_temp_bin_select`: every temperature 0–255 °C on two modules,
  including the boundaries 55/56 and 85/86, the one-clock latency and the
  reset bin.
- `tb_timing_table`: the reset contents (standard 11/28/12/11 and reduced
  8/19/8/9, derived by hand), random software writes, module isolation, the
  fixed over-range set, and when a write becomes visible.
- `tb_bank_timing_checker`: each interval measured in cycles for three
  sets, and that a set change during tRAS does not shorten it.
- `tb_aldram` (default parameters): random ACT/RD/WR/PRE traffic to all
  banks, compared cycle by cycle with a reference model of the legal issue
  times. The run passes through 45 °C, 70 °C, 95 °C (over range, after a
  faster set was written to the 85 °C bin), 80 °C and 50 °C (after the
  55 °C bin was reloaded). It ends with random temperature changes under
  traffic. At each point it measures the read and write latency sums
  (62.5 / 42.5 ns standard, 45.0 / 31.25 ns at 55 °C). It counts tRCD,
  tRAS, tWR and tRP stalls, commands in each bin, the over-range fallback,
  use of a software-written set, and bin changes with rows open. It fails
  if any of these never happened.
- `tb_aldram_modules`: the same on two modules, which must spend time in
  different bins.
- `tb_aldram_traces`: fixed command traces with a closed-form run time,
  checked exactly at 45 °C and at 70 °C:
  - a row miss per access on one bank (GUPS-like);
  - the same for writes;
  - reads streamed over all 8 banks (STREAM-like).

  The 55 °C set cuts DRAM busy time by 28.2 %, 19.6 % and 28.2 %. How much
  of that a program gains depends on how memory-bound it is. On a real
  system, AL-DRAM with these settings was reported to speed up
  memory-intensive programs by 14 % on average.

## Departures and limits

- The unit chooses the set per module, not per bank. Banks within one
  module also differ, but using that was left open by the original
  proposal and is not built.
- The standard single values, the 1.25 ns clock, `WR_DATA_END` and
  round-to-nearest for the reduced set are choices made for this design.
  Only the two standard sums and the four reduction percentages come from
  the AL-DRAM results.
- The 85 °C bin resets to the standard set. The average 85 °C reductions
  across modules are not used as a default, because a safe set for a
  particular module has to come from profiling that module.
- The temperature sensor, the DRAM, the rest of the memory controller
  (queues, scheduling, refresh, PHY, data path) and the profiling that
  finds each module's safe set are not part of this RTL. `temp_c`, the
  command port and `cfg_*` are where they connect.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wall -Wno-fatal --top-module tb_aldram \
    -y rtl -y tb +libext+.sv rtl/aldram_pkg.sv tb/tb_aldram.sv
./obj_dir/Vtb_aldram
```

Replace `tb_aldram` with any other testbench name. Parameters of `aldram`
(`NUM_MODULES`, `NUM_BANKS`, `NUM_BINS`, `TEMP_LIMIT_C`) can be overridden
at instantiation. `tb_aldram_modules` shows how. The timing sets
themselves are constants in `aldram_pkg`.
