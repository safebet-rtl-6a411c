# SafeBet speculative access control unit: SystemVerilog RTL

Spectre-style attacks make a processor read, under speculation, data that the
program would never read architecturally. They then leak that data through a
cache or other side channel. SafeBet blocks this with one simple rule:

> A speculative load may hand its value to the pipeline only if the same piece
> of code has already touched the same piece of memory non-speculatively.

An access that has committed once was legal. The code was allowed to see that
data, so seeing it again early leaks nothing new. Any other speculative load is
not cancelled. Its cache access goes ahead, but its value is held back. When
the load reaches the head of the reorder buffer (ROB) it is no longer
speculative. It is then replayed, the way a cache miss is replayed, and the
now-legal access is recorded for next time. Loops, streams and repeated calls
mostly touch what they touched before, so most loads pass at full speed.

This repository holds RTL for the hardware that keeps and checks that record.
It does not include the out-of-order core the unit plugs into.

## Terms

| term | meaning |
|---|---|
| destination | the virtual address a load reads |
| slab / chunk | destinations are tracked per 4 KB slab, and inside a slab per 64 B chunk (64 chunks per slab) |
| region | code is grouped by its PC into 1 GB regions (`PC >> 30`); each trust domain (a library, an isolated plug-in, a JIT heap) lives in its own regions |
| instance (instID) | a 22-bit number naming one dynamic activation of the code of a region; permissions belong to instances, not to PCs |
| owner | the one region whose code may use its caller's permissions (the "utility" code such as `memcpy`, trusted by everyone) |
| SMACT | Speculative Memory Access Control Table: the permission store |
| TOS / 1LBTOS | the top of the committed instance stack (the current instance) and the entry one level below it (its caller) |

## Why instances and not PCs

If permissions were kept per instruction address, an untrusted callee could
inherit them from its caller. The same library code, called by two mutually
distrusting callers, would then carry over what the first caller touched. So
a new instance starts every time control crosses from one region to another,
by a call or by a return. Permissions recorded by one instance never help
another, with one exception: code in the owner region may use the permissions
of the instance that called it. This exception is limited to one level.

| event at commit (crossing regions) | new instance? | instance stack |
|---|---|---|
| call into the owner | yes, may use the caller's permissions | push |
| any other call | yes, inherits nothing | push |
| return from the owner | no, the caller's instID comes back | pop |
| any other return | yes | purge, leaving only the new instance |

A return from a non-owner region cannot safely restore its caller's instance.
Between the call and the return, the callee may have been untrusted code that did
anything. So such a return gets a fresh instID, and everything below it on the
stack is discarded.

## Block structure

```
                  +---------------------------------------------------+
   load unit ---->| smact            permission table, 1-cycle lookup |
   (addr, PC,     |   512 entries, 8-way, (slab tag, instID) + 64-bit |---> ld_wake / ld_hold
    instID, ROB#) |   chunk mask; insert/revoke/flush port            |     ld_kind, ld_inherit
                  +--------------^-------------------^----------------+
                                 | insert            | TOS, 1LBTOS
   ROB head ----->| replay_gate  |    | instance_unit: counter, shadow counter,
                  |  hold marks, |    |   speculative instID, commit rules,
                  |  replay,     |    |   instance_stack (16 x (region, instID))
                  |  insert req  |    +-------------------^----------------------
                  +--------------+      decode / commit of calls and returns
   software ----->| safebet_csr: owner register, insert-disable bit,
                  |   revoke chunk / revoke slab / flush / new-instance commands
```

| file | contents |
|---|---|
| `rtl/safebet_pkg.sv` | sizes, the lookup-result, table-command, stack-operation and register-address enums |
| `rtl/smact.sv` | the permission table |
| `rtl/instance_stack.sv` | committed stack of (region, instID) |
| `rtl/instance_unit.sv` | instance counter, shadow counter, call/return rules, flush requests |
| `rtl/replay_gate.sv` | per-load hold/wake decision, per-ROB-entry wait marks, replay and insert at the ROB head |
| `rtl/safebet_csr.sv` | software register interface |
| `rtl/safebet_top.sv` | the unit of one core: the four blocks and the arbitration of the table's update port |

## The permission table (`smact`)

A 64-bit destination address splits into a 46-bit tag, a 6-bit set index, a
6-bit chunk number and a 6-bit byte offset. Each way of a set holds a valid
bit, a tag, an instID and a 64-bit chunk mask. The same slab therefore takes
one entry per instance that touched it. At the default size the storage is
512 × (46 + 22 + 64) bits plus valid bits, about 8.3 KB.

**Lookup.** Up to `PORTS` loads per cycle (two by default) can be looked up.
A lookup runs alongside the L1 data-cache access and answers one cycle later.
A load hits when both of these hold:

* the instID it was tagged with at decode equals the current TOS; and
* some way with the load's tag has its chunk bit set under the TOS instID, or,
  for a load whose PC is in the owner region, under the 1LBTOS instID (the
  `inherit` flag).

The first condition covers the window between the decode and the commit of a
crossing call or return. Loads decoded after such a transfer belong to an
instance whose permissions are not yet in force, so they wait.

A miss is also classified, for statistics:

* **slab miss**: no way holds the slab at all;
* **chunk miss**: the slab is present, but no instance has the chunk;
* **instance miss**: the chunk is present only under other instances.

**Insert.** An insert happens only for a load that missed and was then replayed
at the ROB head. The chunk bit is set in the (slab, TOS instID) way if one
exists. Otherwise the entry goes into a free way, or into the tree
pseudo-LRU victim. Only commit-time inserts update the replacement state, and
only commits insert or evict. A speculative load therefore cannot change the
table's contents, and the table cannot be used as a side channel itself.

**Revoke and flush.** When memory is freed, or an access boundary moves, old
permissions must be dropped before the memory is reused. Software can revoke
one chunk for every instance, or every entry of a slab. It can also flush the
whole table. A chunk revoke that empties an entry frees that entry.

## Instance bookkeeping (`instance_unit`, `instance_stack`)

This is the least obvious part of the design.

**Counter at decode, stack at commit.** Every crossing call or return that is
decoded takes the next value of the instance counter. That value travels with
the instruction to commit (`dec_new_inst` → `cm_inst`). The stack changes only
at commit, so a squash never needs to repair it. A squash only wastes some
counter values, and instIDs stay unique. A return takes a counter value too,
even though it uses it only if it turns out to start a new instance.

**The instID that loads carry (`spec_inst`).**

* After a decoded crossing call, or a non-owner return, `spec_inst` is the
  fresh value. Such loads cannot hit before the transfer commits, because the
  TOS does not match yet.
* After a return from the owner, `spec_inst` is the caller's committed instID,
  which that return will restore. This is taken from 1LBTOS, and only when no
  other crossing transfer is in flight.
* Whenever no crossing transfer is in flight (after commits or a squash),
  `spec_inst` is set again to the committed TOS.

This bookkeeping uses a small in-flight counter (`PENDW` bits). It assumes at
most one crossing transfer is decoded and at most one committed per cycle.

**Shadow counter.** This counts committed crossing calls that have not yet
returned. A purge resets it to zero. A return from the owner restores its
caller only if the shadow counter is non-zero and a 1LBTOS exists. Otherwise
it is treated as an unmatched return (`ev_underflow`) and gets a new instance.

**Overflow.** The stack has `DEPTH` entries (16). A push onto a full stack
drops the bottom entry (`ev_stack_overflow`). A later return that would need
that entry finds no caller and takes a new instance. This is safe, at some
cost in speed.

**Counter wrap, context switch, software new instance.**

* When the 22-bit counter wraps, the whole table is flushed.
* A context switch clears the stack, resets the counter and flushes the
  table. Entries carry no process ID.
* Software can give the running instance a fresh instID. Do this when
  recompiled code reuses a code region in place.

## Load handling (`replay_gate`)

One cycle after the lookup, the verdict meets the core's own cache and
store-queue result:

* **hit**: `wake` as soon as the data is there;
* **miss**: `hold`. This also applies when the value would come from store-to-load
  forwarding (`fwd_blocked`). A forwarded value would otherwise pull a
  speculatively written secret into the pipeline.

A missing load sets a mark on its ROB entry. When a marked load is at the ROB
head, `head_replay` asks the core to re-execute it, and the permission is
inserted under the TOS instID. No insert happens while the insertion-disable
bit is set. Code handling secrets can set that bit, so that its accesses leave
no permission behind. Loads still wait and replay as usual while it is set. A
squash clears all marks.

Stores are not checked and do not insert. A store transmits nothing before it
commits.

## Software interface (`safebet_csr`)

| address | name | access |
|---|---|---|
| 0 | `CSR_OWNER` | read/write: owner region number (`VA >> 30`), set by the loader |
| 1 | `CSR_CTRL` | read/write: bit 0 disables SMACT insertion |
| 2 | `CSR_REVOKE_CHUNK` | write: destination address; its chunk is revoked for every instance |
| 3 | `CSR_REVOKE_SLAB` | write: destination address; all entries of its slab are invalidated |
| 4 | `CSR_FLUSH` | write: invalidate the whole SMACT |
| 5 | `CSR_NEW_INST` | write: give the current instance a fresh instID |
| 6 | `CSR_STATUS` | read: bit 0 is set while a revoke or flush waits |

Revoke and flush commands go into a one-deep queue. While a command is pending,
`csr_ready` is low and further revoke or flush writes are ignored. Software
polls `CSR_STATUS` before issuing the next one. This is how a free-batching
handler walks its list of freed blocks. The table's single update port serves,
in order of priority:

1. a flush requested by hardware (counter wrap, context switch);
2. the commit-time insert;
3. the queued software command.

## Interface of `safebet_top`

All ports are synchronous to `clk`. `rst_n` is an active-low asynchronous
reset.

| group | ports | timing |
|---|---|---|
| lookup | `ld_valid[P]`, `ld_pc`, `ld_addr`, `ld_inst`, `ld_rob` | cycle t, with the D-cache access; `ld_inst` is `spec_inst` captured when the load was decoded |
| verdict | `ld_data_ok`, `ld_fwd` in; `ld_wake`, `ld_hold`, `ld_kind`, `ld_inherit`, `ld_fwd_blocked` out | cycle t+1 |
| decode | `dec_valid`, `dec_is_call`, `dec_is_ret`, `dec_pc`, `dec_target` in; `dec_cross`, `dec_new_inst`, `spec_inst` out | combinational; the counter steps at the clock edge |
| commit | `cm_valid`, `cm_is_call`, `cm_is_ret`, `cm_pc`, `cm_target`, `cm_inst` | the same transfer at commit, with its `dec_new_inst` |
| ROB head | `head_valid`, `head_rob`, `head_is_load`, `head_addr` in; `head_replay` out | present the head load once the instructions older than it have committed (one cycle after a crossing commit) |
| control | `squash`, `ctx_switch`, `csr_we`, `csr_addr`, `csr_wdata` in; `csr_rdata`, `csr_ready` out | |
| status | `tos_inst`, `tos_region`, `rob_waiting`, `inst_counter`, `shadow_counter`, `ev_*` pulses | `ev_*` are one-cycle pulses for performance counters |

Parameters, with their defaults: `ENTRIES` 512, `WAYS` 8, `SLAB` 4096,
`CHUNK` 64, `AW` 64, `IW` 22, `RSHIFT` 30, `DEPTH` 16, `ROB` 192, `PORTS` 2.
`ENTRIES/WAYS`, `WAYS`, `SLAB` and `CHUNK` must be powers of two. Assertions
check this, along with a few invariants: no duplicate (slab, instID) entry, a
legal stack depth, and at most one port reporting a given ROB entry.

## What follows the published design and what is this design's own

These points follow the published design:

* table geometry (512 × 8-way, 4 KB / 64 B, 22-bit instIDs, virtual tags);
* lookup alongside the cache;
* hold-and-replay at commit;
* commit-only insertion and eviction;
* the call/return rules, one-level owner inheritance through 1LBTOS, and the
  shadow counter;
* the flush on counter wrap and on context switch;
* revocation by destination from software;
* the owner register, insertion disable, and blocking of forwarded values.

These are this design's own choices:

* two lookup ports;
* a 16-entry stack;
* a one-cycle lookup latency;
* tree pseudo-LRU replacement;
* a chunk revoke that frees an emptied entry;
* the miss classification when several instances share a slab;
* the in-flight counter and resync rule for `spec_inst`;
* an 8-bit saturating shadow counter that a purge clears;
* the register map, command queue and update-port priority;
* an owner test based on the load's own PC region.

Known limits:

* Only one owner region is supported. More would need more owner registers.
* After a counter wrap the table is flushed, but older instIDs still on the
  instance stack are kept. In principle a new instance could reuse one of
  those numbers. With 4 M values between wraps this is remote. Clearing the
  stack as well would close the gap.
* The physically-tagged variant and per-process IDs in entries are not built.
* The software side (batched freeing with revocation, 64-byte minimum
  allocation, 1 GB-aligned loading of trust domains) is not part of this RTL.
  It uses the CSR commands above.

## Simulating

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it does |
|---|---|
| `tb_smact` | directed cases, then random inserts/revokes/lookups at full size, against a reference model |
| `tb_instance_stack` | random operations against a queue model, including overflow |
| `tb_instance_unit` | the call/return table written out by hand: in-flight windows, squash, overflow, underflow, wrap (6-bit counter) |
| `tb_replay_gate` | random results on two ports against a 192-entry ROB model |
| `tb_safebet_csr` | register map and command handshake |
| `tb_safebet_top` | end-to-end with an 8-bit instID and a 4-deep stack. Directed scenarios cover learning at commit, an out-of-bounds load held and squashed, the decode-to-commit window, owner inheritance, the confused-deputy case, retain and purge, revokes, flushes, insertion disable, eviction, overflow, underflow, wrap and context switch. A random phase then checks the security property: a load is woken only if the current instance committed an access to its chunk that was not revoked or flushed since. 24 mechanisms are counted, and the test fails if any of them never occurs |
| `tb_safebet_full` | the top at its default parameters: miss, replay, hit, owner inheritance, retained caller instance, squash, and all 512 entries filled and hit |

To run one with Verilator 5 (the package first, then the RTL, then the
testbench), from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_safebet_top \
    rtl/safebet_pkg.sv rtl/smact.sv rtl/instance_stack.sv rtl/instance_unit.sv \
    rtl/replay_gate.sv rtl/safebet_csr.sv rtl/safebet_top.sv tb/tb_safebet_top.sv
./obj_dir/Vtb_safebet_top
```

## Evaluated workloads

The design was evaluated on 18 SPEC CPU2006/2017 programs. Their SMACT miss
rates at 512 entries range from 0.1 to 137 per thousand instructions.

The unit holds permissions, not data, so any program runs correctly at any
table size. A table that is too small costs replays, not correctness. At the
default size the table covers 2 MB of destinations (512 × 4 KB). This is
enough for every program except `mcf`, which needs about 8 K entries to run
at nearly unprotected speed. The table size (`ENTRIES`: 128, 512, 2 K or 8 K)
and the slab size (`SLAB`: 2 to 8 KB) used in the size-sensitivity study are
parameters of `smact` and `safebet_top`.
