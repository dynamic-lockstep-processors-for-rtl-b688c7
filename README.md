# Dynamic lockstep monitor

Classic lockstep ties two or more cores together for good: they always run the
same code, and a comparator watches them all the time. That is wasteful when
only a small part of the software is safety relevant. The design here lets
otherwise independent cores of a multicore system *join* lockstep on demand.
They run one safety-critical routine as a modular-redundant group, MooN, for
example 2-out-of-3. Afterwards they *leave* and go back to their own work.

A hardware **lock-step monitor** makes this work. When safe processing is
requested, it interrupts all cores and collects the first N that answer. It
releases those N in the same clock cycle, so from then on they run in step.
Their bus transfers are voted, and only the majority transfer reaches a
private safe memory. When the routine ends, the monitor releases the cores
together. A watchdog turns any loss of availability into a permanent error
signal, the *safe state*: too few cores answering, a routine that never ends,
or a vote with no majority.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable. It lints cleanly
in Verilator and slang, apart from the warnings noted below.

## System structure

```
  core 0   core 1   core 2          (soft processors, not part of this RTL)
    |        |        |             one Avalon-MM master each: core_req/core_rsp
 [decoder][decoder][decoder]        avalon_decoder, one per core
   |  |  |  |   ...
   |  |  |  +--------------------> control bus ---[arbiter]--+
   |  |  +-----------------------> psyb[i] (sync bus)        |
   |  +--------------------------> plsb[i] (lockstep bus)    |
   +--[arbiter]--> system_RAM                                 v
                              +---------------------------------------+
                              | lock_step_monitor                     |
                              |  controller  synchronizer  voter      |
                              |                  observer             |
                              +--------------------+------------------+
                                                   | lsb (voted safe bus)
                                              [decoder]
                                              /       \
                                          ls_RAM     ls_I/O (external port)
```

`dls_system` is the top. Each core sees this address map (byte addresses):

| address       | target                                                       |
|---------------|--------------------------------------------------------------|
| `0x0000_0000` | `system_RAM`, shared through a round-robin `arbiter`         |
| `0x0001_0000` | the core's `plsb` port: `ls_RAM` (`0x0001_0000`) and ls_I/O (`0x0001_8000`) behind the voter |
| `0x0002_0000` | `LOCKSTEP_SYNC_ADDRESS` on the core's `psyb` port            |
| `0x0002_0100` | the monitor's control registers (shared through a second `arbiter`) |

Any other address is answered at once with zero. `ls_RAM` is filled through
its own write-only load port (`ls_load_*`) before safe processing is first
used. Only voted transfers reach it afterwards.

## A safe-processing run

1. **Trigger.** Some core writes 1 to the `CTRL` register, or the external
   `request_sp` pin rises. The controller sends a one-cycle `start` to the
   synchronizer and raises `irq` to all cores.
2. **Join request.** Each core's interrupt routine reads
   `LOCKSTEP_SYNC_ADDRESS`. The read stalls (`waitrequest` stays high).
3. **Selection.** When at least N reads are stalled (N = participants
   register), all stalled reads are answered in one cycle. The first N in
   arrival order read `1` (accept). The others read `0` (reject) and return to
   their normal work. `enabled[]` marks the N accepted cores, and
   `lockstep_processing` rises. `irq` falls one cycle later.
4. **Lockstep.** The accepted cores left their stalled read in the same cycle,
   so they now execute the same code cycle by cycle. They call the safe
   routine, whose code and data sit in `ls_RAM`, reached through `plsb`. The
   voter forwards the majority transfer onto `lsb` and returns the one answer
   to all cores that agree with it.
5. **Late cores.** A core whose sync read arrives after selection is rejected
   at once.
6. **Leave request.** At the end, each participant reads
   `LOCKSTEP_SYNC_ADDRESS` again. These reads stall until a majority
   (`floor(N/2)+1`) of the participants has issued them. Then all stalled
   leave reads are released in the same cycle, `enabled[]` clears, and the
   monitor is idle again.

The core side is a short interrupt routine. It reads the sync address, tests
the low byte for zero, calls the safe routine if the answer was non-zero, and
reads the sync address again at the end. `tb/tb_dls_system.sv` models it with
tasks.

## Synchronizer: joining and leaving

States (`sync_state_t`): `IDLE`, `COLLECT`, `LOCKSTEP`.

* **IDLE.** Sync reads are answered immediately with 0. There is one
  exception: a read in the cycle of the `start` pulse. `irq` rises in that
  same cycle, so a core that answers immediately is already stalled and
  counted. Without this, the fastest responders would be rejected.
* **COLLECT.** Each new sync read is recorded with an arrival stamp: the
  number of reads already waiting when it came. Reads that arrive in the same
  cycle share a stamp, and the lower port index wins the tie. As soon as the
  registered count of waiting reads reaches N, selection happens in that cycle:
  * the reads ranked below N get `1`;
  * the rest get `0`;
  * `enabled <= chosen`.

  A read that is first presented in the selection cycle is not yet counted. It
  stays stalled for that cycle and is rejected in the next one.
* **LOCKSTEP.** A sync read from a core that is not enabled is rejected at
  once. A sync read from an enabled core is its leave request. It is recorded
  and stalled. When the number of recorded leave requests reaches
  `M = floor(N/2)+1`, all recorded reads complete together and the state
  returns to `IDLE`. An enabled core that has not asked to leave by then is
  simply dropped. Releasing on a majority rather than on all N means that up to
  N-M failed cores cannot hold the healthy ones in lockstep. A dropped core
  that reads the sync address later gets `0`.

Timing: a sync read is answered no earlier than the cycle after it is first
presented, because arrivals are registered. With all cores answering together,
selection takes exactly one stall cycle. Leaving together also takes one.

## Voter: compare, vote, forward

The voter is combinational, so lockstep adds no clock cycle to the safe bus.
It has three parts.

* **`compare_matrix`** compares every `plsb` request with every other one
  into an N×N matrix:
  * two idle ports (no read, no write) are equal whatever they leave on the
    address and data lines;
  * otherwise read, write, address and byte enables must match;
  * for a write, the write data must match as well.
* **`majority_voter`** counts, for each enabled input, how many enabled inputs
  equal it (itself included). It selects the first input, lowest index first,
  whose count reaches `M = floor(popcount(enabled)/2)+1`. It also outputs
  `agree`, the set of enabled inputs equal to the selected one. If no input
  reaches M while some input is enabled, it raises `no_majority`.
* **`bus_multiplexer`** forwards the selected request to `lsb`, or an idle bus
  if nothing is selected. It sends `lsb`'s response to the agreeing inputs
  only:
  * an enabled input that disagrees is stalled, so a faulty core is frozen on
    its diverging transfer while the majority runs on;
  * ports that are not enabled never reach `lsb` and are answered at once with
    zero, so a core outside the lockstep group cannot touch `ls_RAM`.

An outvoted core stays stalled until the group leaves and `enabled[]` clears.
Its pending transfer is then answered with zero, and its next sync read is
rejected. Re-checking or re-admitting such a core is left to software.

Because comparison happens every cycle, the participants must issue identical
transfers in identical cycles. The synchronizer releases them together. The
cores must be built so that they stay together: no caches, static branch
prediction, and stack contents that do not depend on each core's history
(a shadow stack or shadow register set). The safe routine should fetch
from `ls_RAM`. A core that drifts by one cycle is outvoted on that transfer.

## Observer and the safe state

`observer` counts the cycles spent in the current synchronizer state. The
availability `error` is raised (registered, one cycle later) in three cases:

| cause (`error_cause`) | condition                                                    |
|-----------------------|--------------------------------------------------------------|
| `ERR_SYNC_TIME`   (1) | still in `COLLECT` in its cycle `SYNC_TIMEOUT+1`             |
| `ERR_LS_TIME`     (2) | still in `LOCKSTEP` in its cycle `LOCKSTEP_TIMEOUT+1`        |
| `ERR_NO_MAJORITY` (3) | `no_majority` from the voter while in `LOCKSTEP`             |

`error` is sticky until reset: it represents the permanent safe state. What
the system does in that state (reset, shut-down, I/O to a safe value) is up to
whatever listens to `error`. The monitor does not stop the synchronizer.

## System state

`system_fsm` keeps the state of the whole system, as seen from outside:

```
BOOT --boot_ok--> NORMAL --request--> SYNCHRONISE --lockstep begins--> SAFE_PROCESSING
  |                 ^  |                  |                               |   ^  |
  |                 |  +------------------+---- error ------------------->|   |  |
  |                 +----------------- lockstep ends ---------------------+   |  |
  +--boot_nok--> SAFE_STATE <------------ error -----------------------------+  |
                                            outvoted participant (counted) -----+
```

* The boot self-checks are not part of this design. Their verdict arrives on
  `boot_ok`/`boot_nok`.
* "Request" means the synchronizer has left `IDLE`.
* "Error" is the observer's availability error.
* `SAFE_STATE` is permanent until reset, and `safe_state` is its output.
* During safe processing, a cycle in which the voter outvotes at least one
  participant increments `nok_count`. The system stays in safe processing as
  long as a majority exists: with N participants it tolerates N-M failed
  ones.
* The state machine reports only. It does not block triggers during `BOOT`.

## Controller and its registers

The control bus is an Avalon slave with no wait states. The word offset is
taken from address bits [3:2].

| offset | name           | access | meaning                                                        |
|--------|----------------|--------|----------------------------------------------------------------|
| 0      | `CTRL`         | W      | bit 0 = 1 triggers safe processing                             |
|        |                | R      | bit 0: a request or a lockstep run is in progress              |
| 1      | `PARTICIPANTS` | RW     | N; only odd values with 3 <= N <= `N_CORES` are accepted, and only while idle |
| 2      | `STATUS`       | R      | [1:0] synchronizer state, [2] `lockstep_processing`, [3] `error`, [5:4] error cause, [6] `irq`, [8 +: N_CORES] `enabled` |

`request_sp` passes through a two-flip-flop synchronizer and triggers on its
rising edge, three clock edges after it rises. A trigger while a request or a
run is in progress is ignored. `irq` rises with `start` and falls in the cycle
after `lockstep_processing` rises.

## Bus conventions

All ports use the same Avalon-MM subset, defined in `lsm_pkg` as `av_req_t`
(address, read, write, writedata, byteenable) and `av_rsp_t` (readdata,
waitrequest):

* 32-bit data and byte addresses;
* one transfer at a time;
* the master holds its request until `waitrequest` is low, and read data is
  valid in that cycle.

Assertions in `arbiter` and `synchronizer` check that stalled requests are
held. Both RAMs have a registered read port, so a read takes two cycles (one
wait state) and a write takes one.

## Parameters

| parameter (top `dls_system`) | default | meaning |
|------------------------------|---------|---------|
| `N_CORES`              | 3     | processing blocks = monitor ports (the three-core architecture; the prototype board used five) |
| `DEFAULT_PARTICIPANTS` | 3     | reset value of the participants register |
| `SYSRAM_WORDS`         | 4096  | system_RAM size, 32-bit words |
| `LSRAM_WORDS`          | 4096  | ls_RAM size, 32-bit words |
| `SYNC_TIMEOUT`         | 1024  | cycles allowed for collecting participants |
| `LOCKSTEP_TIMEOUT`     | 65536 | cycles allowed for one safe routine |
| `LSRAM_TMR`            | 0     | 1: ls_RAM kept in three copies and read through a bitwise 2oo3 vote |

Only `N_CORES` comes from the source description. The RAM sizes and the time
limits are placeholders to adapt to the application. `N_CORES=5` runs 2oo3 or
3oo5 on five cores. A 2oo2 group, as in some illustrations of the concept,
cannot be configured: the participants register insists on an odd number of at
least three, so the vote never ties.

## Departures and choices

What follows the source description:
* the structure (cores, arbitrated system RAM, a monitor with one port per
  core, voted safe bus to ls_RAM and ls_I/O);
* the four monitor sub-components and the signals between them (`start`,
  participants, `lockstep_processing`, `enabled[]`, equality matrix,
  selection, `no_majority`, state transitions, `error`, `irq`);
* the stall/accept/reject protocol on a sync address and the second read for
  the release;
* the odd-participants rule;
* the "first input equal to at least M" vote and the idle bus without a
  majority.

Choices made here:
* the Avalon subset and the address map;
* the register map;
* arrival ordering with the tie broken by port index (a random choice was
  suggested as future work);
* releasing on a majority of leave requests;
* stalling dissenting participants;
* zero answers to non-participants on `plsb`;
* what a comparison includes;
* counting the `start` cycle as collection;
* the edge-triggered, synchronized `request_sp`;
* the sticky error and the time limits;
* the round-robin arbiter with locked grants;
* the ls_RAM load port;
* the form of the triple-redundant ls_RAM (`LSRAM_TMR=1`): the source names
  TMR only as a possibility, so it is an option and off by default. Every
  write goes to three arrays. Each array has its own registered read port, and
  the read data is the bitwise majority of the three. `ls_ram_corrected`
  pulses with the data of a read that masked a difference. Nothing scrubs the
  copies: a masked upset stays until the word is rewritten;
* the `dissent`/`nok_count` reporting;
* `no_majority` comes from the majority voter, as the prose has it. One
  block diagram draws that line from the bus multiplexer instead;
* an external entity learns that safe processing has ended from
  `lockstep_processing` falling; there is no separate end signal;
* `boot_ok` leading to normal processing: the state diagram can be read as
  drawing that arrow towards safe processing, but the prose says normal.

Not built:
* the processors themselves;
* ls_I/O, which has no defined function (its bus is a port of the top);
* the boot self-checks (only their verdict is an input);
* degraded operation and re-integration of failed cores;
* random selection of participants;

## Lint notes

Verilator reports `UNOPTFLAT` (a combinational loop) at the top. It is not a
real loop. Each request/response struct array is one signal to the linter, and
a slave's `waitrequest` depends on its request. No response feeds back into a
request. A few `UNUSEDSIGNAL` warnings concern address bits that a block does
not decode.

## Files and simulation

`rtl/` holds one module or package per file. `lsm_pkg` holds the shared
types, the address map and the codes; the modules are listed in the
structure above. `tb/` holds one self-checking testbench per module (`tb_<module>.sv`)
plus:

* `tb_dls_system.sv`: five cores, short time limits. It covers both
  triggers, surplus and late rejection, 2oo3 and 3oo5 runs, an outvoted core,
  no majority, a collection time-out and failed boot checks. ls_RAM runs
  triple-redundant there, and one copy of a loaded word is corrupted to show
  the vote masking it. It counts each
  mechanism and fails if one never happens.
* `tb_dls_system_full.sv`: one complete run at the default parameters.

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. To run one:

```
verilator --binary --timing --assert -Irtl rtl/lsm_pkg.sv tb/tb_dls_system.sv \
          --top-module tb_dls_system -Mdir obj_dir -o sim
./obj_dir/sim
```

Use `-Wno-fatal` if lint warnings should not stop the build. The simulator is
two-state: everything that is read is reset or written first.
