# Hybrid Modular Redundancy unit for a 12-core RISC-V cluster

Radiation can flip bits inside a processor core. A core that has been hit may go on running
with a wrong internal state and send wrong data out to the rest of the system. This design is a
wrapper that sits between the cores of a multi-core cluster and everything else in the cluster.
While the system runs, it can bind the cores into redundant groups and release them again:

* **Independent mode.** Every core runs its own thread. This gives the most throughput and no
  protection.
* **DMR, dual-core lockstep.** Two cores run the same thread on the same inputs. A checker
  compares their outputs bit by bit. On a difference, it blocks the pair's outputs to the system
  and raises an error.
* **TMR, triple-core lockstep.** Three cores run the same thread. A majority voter passes on the
  value two of them agree on and names the core that disagreed. The group therefore keeps running
  correctly through a single fault.

A group that was hit must have its state repaired before it can be trusted again. The unit
offers two ways to do that:

1. **Software resynchronisation.** This is only possible in TMR. An interrupt makes the cores
   save their (voted) state to memory. The unit then clears the cores, and the cores reload the
   saved state.
2. **Rapid recovery.** This is the hardware route. An ECC-protected copy of the group's agreed
   register file, program counter and CSRs is updated every cycle. After a mismatch, the unit
   clears the cores, halts them through their debug request and writes the copy back into them.
   The whole recovery takes 24 clock cycles.

The same controls let software switch modes while the system runs. A *mission-critical
section* locks independent cores into a group for a piece of code. A *performance section*
splits a group so its cores can run in parallel for a while.

The default configuration is 12 cores, which can form 6 DMR groups or 4 TMR groups. DMR,
TMR and rapid recovery are all built in.

## Grouping and core numbering

The groups are interleaved so that the lowest core IDs stay the "visible" ones:

| mode | group *g* contains          | groups with 12 cores | main core |
|------|-----------------------------|----------------------|-----------|
| DMR  | *g*, *g*+N/2                | 0..5                 | *g*       |
| TMR  | *g*, *g*+N/3, *g*+2N/3      | 0..3                 | *g*       |

Example with 12 cores: core 0 pairs with core 6 in DMR, and with cores 4 and 8 in TMR.

How a locked group is wired (`hmr_split_lock_mux`):

* **Inputs.** Every core of the group receives the inputs of the main core's system port. This
  includes its `core_id`. The locked group therefore looks like one core with that ID, and
  parallel software keeps working with IDs 0..5 or 0..3.
* **Outputs.** The main core's system port carries the checker output (DMR) or the voter output
  (TMR). The ports of the helper cores output zero, so they make no requests.

Each group is locked or split on its own. Independent cores, DMR pairs and TMR triples can run
at the same time, as long as no core belongs to two groups. The configuration registers enforce
that rule: enabling a group switches off every group of the other mode that shares a core with
it.

## What is compared

The checker (`hmr_dmr_checker`) and the voter (`hmr_tmr_voter`) work on a single bundle per core
(`core_cmp_t`). It holds the core's whole output interface and also the core's **state write
stream**.

The output interface is: instruction request and address; data request, address, write enable,
byte enables and write data; debug halted; interrupt acknowledge; busy.

The state write stream (`core_state_wr_t`) is what a slightly modified core exposes. It holds:

* the two register-file write ports, each with enable, address and data;
* the PC it would resume from;
* its set of machine CSRs.

Because the state stream is checked or voted together with the outputs, the backup copy used
by rapid recovery only ever receives agreed values:

* In DMR, a mismatch blocks the backup in the same cycle.
* In TMR, the backup takes the voted value, so a single bad core cannot corrupt it.

The comparison is combinational. The error is seen in the cycle in which the outputs differ.

* **DMR.** On a mismatch the checker forces the pair's outputs to zero. This withdraws every
  request, so no corrupted access reaches memory. `dmr_error_o` goes high. The gate is
  sticky: once a locked pair has mismatched, `hmr_unit` keeps its outputs at zero until one of
  three things happens. The rapid recovery ends, or the group is cleared, or the group is split.
  This matters because a fault often causes a mismatch of a single cycle. Without the sticky
  gate, the two cores would agree again on the next instruction and send it to the system,
  although the recovery is about to roll both cores back to before that instruction. The
  backup also stays frozen while the gate is held. `dmr_error_o` itself shows the raw checker
  result.
* **TMR.** The voter outputs the bitwise majority. `tmr_error_o` flags any disagreement. A 3-bit
  fault ID marks which core or cores differ from the majority.

## Group controller: split, lock, unload, reload

Every DMR group and every TMR group has its own `hmr_group_ctrl`, a four-state machine:

```
            lock requested, all cores stored SP          (or directly to LOCKED if
   SPLIT ------------------------------------> RELOAD   the cores have not booted yet,
     ^                                          |  ^ \  or via rapid recovery fill)
     | lock withdrawn                SP cleared |  |  | error: clear again
     | (clear helpers)                          v  |  /
   LOCKED <-------------------------------------+ -
     |  error (TMR, software recovery)           ^
     v                                           | SP stored (clear)
   UNLOAD ---------------------------------------+
```

**SP registers.** Software talks to this machine through one *stack pointer (SP) storage
register* per core, in the configuration space.

* A core that has saved its state to its stack writes its stack pointer there. A non-zero value
  means "my state is in memory".
* Once the state has been restored, the core writes zero there.
* The boot code of a core reads its SP register, which is selected by `core_id`. If the register
  holds a non-zero value, the core reloads its state from that stack instead of starting fresh.
  This is why a synchronous clear of the cores is harmless at these points.

The flows are:

* **Lock before boot.** A group enabled while its main core has not yet started fetching locks
  at once. This covers configuring the cluster from the host after reset.
* **Mission-critical entry, software path.** Software writes the group enable. The controller
  interrupts the group's cores (`sync_irq_o`), and each core saves its state and stores its SP.
  When every core of the group holds a non-zero SP, the controller locks the group and goes to
  RELOAD. It may also clear the cores (lock setback). The locked cores read the main core's SP
  register, reload that state and write zero, which moves the controller back to LOCKED.
* **Mission-critical entry, rapid-recovery path.** The cores still save their own threads to
  memory. After locking, however, the hardware copies the main core's backed-up state into all
  of the group's cores. There is no software reload.
* **Exit, or entry into a performance section.** Clearing the group enable splits the group at
  once. The main core continues. What happens to the helpers depends on the split setback bit:
  * bit set: the helpers are synchronously cleared, boot, find their SP register non-zero and
    resume the thread they had before the mission-critical section;
  * bit clear: the helpers continue from the split point and set up their own stack, as a
    performance section needs.
* **TMR error, software recovery.** The controller goes to UNLOAD and interrupts the cores.
  The cores save the voted state and store the main core's SP. The controller then clears all
  three cores and enters RELOAD. The cores reload and clear the SP, and the group is LOCKED
  again. A second error during RELOAD clears the cores again; no new unload is needed, since the
  saved state is still good.
* **Delayed resynchronisation (TMR).** If this is enabled, a mismatch does not start a recovery
  at once. The controller remembers which core was faulty and lets the other two go on in
  lockstep. If another core then disagrees, recovery starts immediately.

Unit-level detail: all clears, interrupt requests and recovery starts come out of registers.
They act one cycle after the event that causes them.

### Configuration bits

There is one 5-bit set of these bits for all DMR groups and one for all TMR groups. All bits
except "delay" are set at reset. The delay bit has no effect in DMR.

| bit | name                | effect                                                      |
|-----|---------------------|-------------------------------------------------------------|
| 0   | `CFG_RAPID_RECOVERY`| handle errors and lock entry with the hardware engine       |
| 1   | `CFG_SPLIT_SETBACK` | clear the helper cores when a group splits                  |
| 2   | `CFG_LOCK_SETBACK`  | clear all cores when a group locks / leaves UNLOAD          |
| 3   | `CFG_RELOAD_SETBACK`| clear the cores again on an error during RELOAD             |
| 4   | `CFG_DELAY_RESYNCH` | TMR: tolerate one faulty core until a second one disagrees  |

## Rapid recovery

The unit has one recovery engine (`hmr_rapid_recovery`) per DMR group index. The TMR group with
the same main core uses the same engine. A core can be in only one group at a time, so the two
groups never need the engine together. With 12 cores there are 6 engines.

Each engine holds:

* **Recovery RF** (`hmr_recovery_rf`): 31 × 39-bit code words for x1..x31. It has two write
  ports, which follow the core's two RF write ports, and two read ports for the restore.
* **Recovery PC** (`hmr_recovery_pc`): one 39-bit code word.
* **Recovery CSRs** (`hmr_recovery_csr`): mstatus, mie, mtvec, mscratch, mepc and mcause, each
  as a code word.
* **Controller** (`hmr_rr_ctrl`): the four states Idle → Clear → Halt → Restore → Idle.

All words are stored with an extended Hamming SECDED code (`hmr_ecc_enc`, `hmr_ecc_dec`):

* Parity bits sit at power-of-two positions, and bit 0 is the overall parity.
* A single flipped bit is corrected when the word is read.
* Any error found in a word read during a restore, corrected or not, is reported on
  `rr_ecc_err_o`.
* The protection can be removed at build time (`RecoveryEcc = 0`). The parity bits are then
  tied to zero, and the decoder neither corrects nor flags anything.

**Backup.** The engine copies the group's agreed state stream into its registers every cycle.
The copy stops while the checker or voter reports an error, in the cycle the recovery is
started, and while a recovery is running. The start cycle has to be blocked too. After a
one-cycle TMR mismatch the cores agree again in that cycle. A copy taken then would store a
register write, but the PC that goes with it would be lost, so the restored state would be
one instruction ahead of the restored PC.
When the group is split, the engine follows the main core alone.

**Restore sequence and timing.** The core model halts 4 cycles after a debug request. With that
model the routine runs as follows, counting from cycle 0, the first cycle in which the outputs
differ:

| cycle | event                                                                 |
|-------|-----------------------------------------------------------------------|
| 0     | checker/voter reports the mismatch; backup writes stop                |
| 1     | group controller issues the start pulse                               |
| 2     | **Clear**: synchronous clear to every core of the group               |
| 3     | **Halt**: debug request raised                                        |
| 7     | cores report halted                                                   |
| 8-23  | **Restore**: 16 cycles writing x1..x31 two per cycle (x31 alone in the last one); PC and CSRs are written in every restore cycle |
| 24    | Idle: debug request dropped, cores resume from the restored PC        |

That is 24 cycles from error to resumed execution. Of these, 4 are the core's halt latency, so
a core that halts faster or slower shifts the total by the same amount. The restore writes
appear on `core_rec_o`. A core applies them to its RF, PC and CSRs while it is halted.

## Configuration registers (`hmr_regs`)

The registers are reached through a simple peripheral port:

* A request is granted in the same cycle.
* Read data and `rvalid` come one cycle later.
* Only whole 32-bit words are accessed.

| offset     | name         | access | content                                                       |
|------------|--------------|--------|---------------------------------------------------------------|
| 0x000      | AVAIL        | RO     | [0] DMR built, [1] TMR built, [2] rapid recovery built, [3] DMR enforced, [4] TMR enforced, [15:8] core count |
| 0x004      | DMR_ENABLE   | RW     | one bit per DMR group: lock request                           |
| 0x008      | TMR_ENABLE   | RW     | one bit per TMR group                                         |
| 0x00C      | DMR_CONFIG   | RW     | configuration bits for DMR groups                             |
| 0x010      | TMR_CONFIG   | RW     | configuration bits for TMR groups                             |
| 0x014      | CORE_MODE    | RO     | 2 bits per core: 0 independent, 1 DMR, 2 TMR                  |
| 0x018      | DMR_STATE    | RO     | 2 bits per DMR group: 0 split, 1 locked, 2 unload, 3 reload   |
| 0x01C      | TMR_STATE    | RO     | same for TMR groups                                           |
| 0x100+4·c  | SP[c]        | RW     | stack pointer storage of core c                               |
| 0x200+4·c  | MISM[c]      | RO     | mismatches charged to core c (a write clears it)              |

How the mismatch counters are charged:

* A TMR mismatch counts once for each core named in the fault ID.
* A DMR mismatch counts for both cores, since the faulty one cannot be told apart.
* Only the rising edge of an error counts.

## Interfaces of the top (`hmr_unit`)

| port                         | meaning                                                                  |
|------------------------------|--------------------------------------------------------------------------|
| `reg_req_i` / `reg_rsp_o`    | configuration port (peripheral interconnect)                             |
| `sys_in_i[c]`, `sys_out_o[c]`| system side of core position *c* (instruction/data ports, interrupts, debug, boot) |
| `core_in_o[c]`, `core_out_i[c]` | the same signals on the core side                                     |
| `core_bkp_i[c]`              | state write stream the core exposes                                      |
| `core_rec_o[c]`              | restore writes into the core                                             |
| `core_synch_rst_o[c]`        | synchronous clear of the core                                            |
| `sync_irq_o[c]`              | synchronisation interrupt, meant to be routed through the event unit     |
| `dmr_error_o`, `tmr_error_o` | mismatch flags per group                                                 |
| `rr_busy_o`, `rr_ecc_err_o`  | recovery engine status                                                   |

| parameter       | default | meaning                                                         |
|-----------------|---------|-----------------------------------------------------------------|
| `NumCores`      | 12      | cores wrapped; gives `NumCores/2` DMR and `NumCores/3` TMR groups |
| `DmrSupported`  | 1       | build the DMR checkers and allow DMR groups                     |
| `TmrSupported`  | 1       | build the TMR voters and allow TMR groups                       |
| `RapidRecovery` | 1       | build the recovery engines                                      |
| `DmrFixed`      | 0       | lock every DMR group permanently                                |
| `TmrFixed`      | 0       | lock every TMR group permanently (wins over `DmrFixed`)         |
| `RecoveryEcc`   | 1       | SECDED protection of the recovery registers; 0 stores them unprotected |

The core signals and their widths are those of a CV32E40P. Both structs are in `hmr_pkg`.

* **Inputs to a core:** fetch enable; boot address (32); core ID (32); debug request (2);
  interrupt lines (32); instruction grant, read data (32) and read valid; data grant, read data
  (32) and read valid.
* **Outputs of a core:** debug halted; interrupt acknowledge (5); busy; instruction request and
  address (32); data request, address (32), write enable, byte enables (4) and write data (32).

The recovery engine's debug request is ORed into bit 0 of the debug request.

The unit requires two things from a core that the stock CV32E40P does not offer:

* it must put its RF, PC and CSR writes on `core_bkp_i`;
* it must accept the restore writes on `core_rec_o` while halted in debug mode.

## Where this design departs from, or adds to, the source description

* **Recovery engines are shared** between the DMR group and the TMR group with the same main
  core. The source calls for one engine per group, which would be 6 + 4 = 10 engines.
* **The state machine has extra transitions** that the published state diagram does not show:
  * direct lock when the cores have not booted;
  * lock with hardware fill when rapid recovery is on;
  * RELOAD → SPLIT when the lock request is withdrawn.
  DMR groups use the same machine, but an error never sends them to UNLOAD: a DMR pair cannot
  tell which core is right, so it relies on rapid recovery, or leaves its outputs gated and
  signals the error.
* **The split clear is a configuration bit.** The description asks for a partial reset when a
  group splits. It also wants helpers that continue running after a performance-section split.
  Both are supported, and the choice is made through `CFG_SPLIT_SETBACK`.
* **Delayed resynchronisation** tolerates repeated mismatches from the core that is already
  known to be faulty. Only a disagreement from another core forces recovery.
* **This design's own choices:** the CSR set that is backed up, the SECDED code, the register
  map, the bus protocol and the configuration bits. Where the source leaves these open, the
  simplest workable option was taken.
* **Permanent DMR or TMR.** The parameters `DmrFixed` and `TmrFixed` (both off by default)
  lock every group of one mode for good. The source mentions this option but did not evaluate
  it. This design does it in the simplest way. The group enables are tied on, so each group
  locks at boot and can never split, and writes to the enable registers are ignored. If both
  parameters are set, TMR wins. AVAIL bits 3 and 4 report the enforced mode. The split-lock
  logic is still built, so such a unit is no smaller than the default one.
* **Not built:**
  * ECC protection of the buses between the cores and the checkers/voters, which the source
    assumes is inside the cores;
  * the cores, caches, TCDM, interconnects, DMA, event unit and host. These belong to the
    surrounding cluster and must be supplied by the integrator.

## How far it has been tested

Every module has a self-checking testbench in `tb/`. Each one compares the module against an
independently written reference, and each one is known to fail when the module is deliberately
broken.

| testbench                | what it checks                                                                 |
|--------------------------|--------------------------------------------------------------------------------|
| `tb_hmr_dmr_checker`     | random vectors with single and multiple bit differences and masked bits        |
| `tb_hmr_tmr_voter`       | random vectors with zero, one or two corrupted inputs: vote, mismatch, fault ID |
| `tb_hmr_split_lock_mux`  | input sharing and output selection in every mode (6-core instance)             |
| `tb_hmr_group_ctrl`      | every state transition, the configuration bits and delayed resynchronisation   |
| `tb_hmr_regs`            | the register map, exclusivity, SP events and mismatch counters; enforced-mode instances |
| `tb_hmr_ecc_dec`         | random words with 0, 1 or 2 flipped code bits; correction and flags; 16-bit and ECC-off instances too |
| `tb_hmr_recovery_rf`/`_pc`/`_csr` | storage against a reference model, with the write enable blocked      |
| `tb_hmr_rr_ctrl`         | the state sequence, 16 restore cycles and the address order, for halt latencies 1 to 6 |
| `tb_hmr_rapid_recovery`  | restored values equal the last agreed state, with the copy blocked on error; duration |
| `tb_hmr_unit`            | end to end, at the default 12 cores, see below                                 |
| `tb_hmr_unit_fixed`      | two 6-core units with TMR and with DMR enforced: locked from boot, enable writes ignored, rapid recovery |
| `tb_hmr_fault_campaign`  | 300 random upsets at the default 12 cores against fault-free reference cores, see below |

`tb_hmr_unit` connects 12 behavioural core models (`tb/hmr_core_model.sv`) to the unit. The core
model:

* fetches and writes data along a predictable program;
* writes two registers per instruction and updates some CSRs;
* halts 4 cycles after a debug request;
* accepts restore writes;
* can be hit with a bit flip in a register or in its PC.

The testbench acts as the cluster software. It writes registers, answers the synchronisation
interrupt by storing and clearing SP registers, and injects upsets. It passes through every
mechanism and counts each one. A mechanism that never happens counts as a failure. The
mechanisms are:

* independent operation;
* TMR lock before boot;
* TMR rapid recovery, with a check that it takes 24 cycles;
* TMR software unload/reload;
* delayed resynchronisation;
* DMR mission-critical entry through software reload;
* DMR output gating;
* DMR rapid recovery;
* split with helper clear;
* performance-section split;
* lock with hardware fill;
* zeroed helper ports.

After every recovery, the test checks that the state of the affected cores has been repaired.

`tb_hmr_fault_campaign` is a small fault-injection campaign on the same full-size unit. The
groups are set up as follows:

* TMR group 0 (cores 0, 4 and 8);
* DMR groups 1, 3 and 5;
* cores 2, 6 and 10 running independently.

Next to the unit runs one fault-free reference core for every group. The testbench then
injects 300 upsets into random registers or PCs of random group members: 240 with rapid
recovery, then 60 in TMR with software unload/reload. Every instruction address that a group
sends to the system is checked. Its first execution must match the reference core. A
re-execution after a rollback must match what was sent the first time at that address.
Other checks in the campaign:

* every rapid recovery takes 24 cycles;
* after each upset, every group is back in lockstep with no error pending;
* no ECC error occurs;
* every mechanism (detection, TMR masking, TMR and DMR rapid recovery, software recovery,
  replay) happens.

This campaign found both the sticky-gate and the start-cycle issues described above.

What is *not* covered: real CV32E40P cores, real software, the event unit and the memory system.
The cycle counts of the software flows (mission-critical entry and exit, software recovery)
depend on those parts and are not reproduced here.

## Simulating

Everything simulates with plain Verilator 5. The package goes first, and the rest is found
through the library path:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/hmr_pkg.sv tb/tb_hmr_unit.sv --top-module tb_hmr_unit -o sim
./obj_dir/sim
```

Swap in any other testbench name to run it. Each testbench prints
`TB_RESULT checks=<n> failures=<m>` at the end and stops itself with a watchdog if it hangs. The
end-to-end test runs at the default 12 cores in a few seconds.

## Files

| file                         | contents                                                       |
|------------------------------|----------------------------------------------------------------|
| `rtl/hmr_pkg.sv`             | types (core interface, state stream, register port), register map, configuration bits |
| `rtl/hmr_unit.sv`            | top: grouping, checkers, voters, controllers, recovery engines, registers |
| `rtl/hmr_split_lock_mux.sv`  | per-core input sharing and output selection                    |
| `rtl/hmr_dmr_checker.sv`     | DMR comparator with output gating                              |
| `rtl/hmr_tmr_voter.sv`       | bitwise majority voter with fault ID                           |
| `rtl/hmr_group_ctrl.sv`      | split/lock/unload/reload controller                            |
| `rtl/hmr_regs.sv`            | configuration and status registers                             |
| `rtl/hmr_rapid_recovery.sv`  | one recovery engine                                            |
| `rtl/hmr_rr_ctrl.sv`         | recovery state machine and RF address generator                |
| `rtl/hmr_recovery_rf.sv`, `hmr_recovery_pc.sv`, `hmr_recovery_csr.sv` | ECC-protected backup storage |
| `rtl/hmr_ecc_enc.sv`, `hmr_ecc_dec.sv` | SECDED encoder and decoder                           |
| `tb/hmr_core_model.sv`       | behavioural stand-in for a core with the required extensions   |
| `tb/tb_*.sv`                 | testbenches                                                    |
