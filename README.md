# SynCron synchronization engines: RTL

Near-data-processing (NDP) systems put many simple cores beside the memory
stacks, split into units. They have no shared cache and no cache coherence,
so locks, barriers, semaphores and condition variables cannot be built from
atomic read-modify-write operations the usual way. SynCron adds a small
hardware **Synchronization Engine (SE)** to every NDP unit instead.

- A core issues a synchronization request as a message to the SE of its own
  unit.
- The SEs coordinate among themselves with messages.
- The state of each active synchronization variable is kept in a small table
  inside the SE, not in memory.

Coordination is **hierarchical**. Every variable has a *home* unit, and that
unit's SE is the variable's **Master SE**.

- Every SE gathers the requests of the cores in its own unit.
- Only the SEs talk to each other across units, and only with the Master SE.

A lock wanted by 16 cores of one unit therefore costs one global acquire and
one global release, however often it changes hands inside the unit. Crossing
units costs far more than staying inside one (20 cycles per link).

When an SE's table is full, the variable is kept in memory as a
*syncronVar*, and the Master SE serves it from there (**overflow**).

This repository holds synthesizable SystemVerilog for the whole
synchronization fabric:

- 4 units × 16 cores;
- per core, the request port that executes the two synchronization
  instructions;
- per unit, the local network and the SE;
- the links between units.

The cores and the DRAM are outside the design. Each core's issue port and
each unit's syncronVar memory port are ports of the top module.

## Structure

```
syncron_top
 ├─ g_unit[u]  (u = 0..3)
 │   ├─ g_core[c].u_if : sync_req_if      one per core (16)
 │   ├─ u_net          : local_net        16 cores -> SE, SE -> cores
 │   └─ u_se           : sync_engine
 │        ├─ u_buf  : msg_buffer (16 x 140-bit messages)
 │        ├─ u_lb   : msg_buffer (32-entry loopback queue)
 │        ├─ u_st   : sync_table (64 x 149-bit entries)
 │        ├─ u_ic   : index_counters (256 x 8-bit, 2-cycle read)
 │        └─ u_ctrl : spu_ctrl (the control logic)
 └─ u_links : inter_unit_net (20-cycle links, one per source SE)
```

`syncron_pkg` holds the shared types: the message, the table entry, the
syncronVar and the opcode list.

## Messages

Every request, grant and notification is one 140-bit message:

| field    | bits | meaning |
|----------|------|---------|
| addr     | 64   | address of the synchronization variable |
| opcode   | 6    | one of 38 operations (below) |
| core_id  | 6    | {unit ID [5:4], core-in-unit [3:0]} of the sender |
| info     | 64   | operand (barrier count, semaphore initial value, broadcast flag) |

Opcodes come in families: lock, barrier, semaphore and condition variable,
plus `DECREASE_INDEXING_COUNTER`. Within a family there are `*_LOCAL`,
`*_GLOBAL` and `*_OVERFLOW` versions:

- a core sends `_LOCAL` to its own SE;
- SEs send `_GLOBAL` to each other;
- an SE that has overflowed sends `_OVERFLOW` to the Master SE.

Codes are numbered 0..37 in the order of `opcode_e` in `syncron_pkg.sv`.

The home unit of a variable is address bits [33:32] (`UNIT_SEL_LSB`). The
SE of that unit is the variable's Master SE.

## Cores: `sync_req_if`

A core issues `req_sync` for operations that must wait (acquire, barrier
wait, semaphore wait, condition wait). The core stays `busy` until its SE
answers, then gets a one-cycle `commit`.

It issues `req_async` for operations that need no answer (release, post,
signal, broadcast). These commit as soon as the local network accepts the
message.

## Local network: `local_net`

A round-robin arbiter moves one core message per cycle into the SE. Responses
are multicast: the SE names a set of cores (a 16-bit mask) and each of them
sees `rsp_valid` in the same cycle. This is how a barrier releases all its
local waiters at once.

## Inter-unit links: `inter_unit_net`

Each SE owns a 20-stage link pipeline. At each destination, a round-robin
arbiter merges the four incoming pipelines. Messages between one pair of SEs
arrive in the order they were sent; the protocol depends on this.

## The Synchronization Engine

### Table and counters

A **Synchronization Table (ST)** entry is 149 bits:

| field | bits | meaning |
|-------|------|---------|
| address | 64 | the variable's address |
| global waiting list (gwl) | 4 | one bit per SE |
| local waiting list (lwl) | 16 | one bit per core of the unit |
| state | 1 | free or occupied |
| TableInfo | 64 | per-primitive information |

The lookup is fully associative and registered (one cycle). On a miss, the
lowest free entry is offered for allocation.

The **indexing counters** are 256 counters indexed by address bits [7:0].
They record how many requests for variables with those low bits are being
served through memory. While a counter is non-zero, a new variable that
aliases to it is *not* allocated in the ST. This keeps every message for an
overflowed variable on the memory path, even after entries free up.

### Serving a message (`spu_ctrl`)

The control logic serves one message at a time:

```
IDLE -> LK1 (ST lookup + counter read issued)
     -> LK2 (ST result; counter result after 2 cycles)
     -> [MRD -> MWAIT: read syncronVar]   (overflow, Master SE only)
     -> PROC (update entry / syncronVar, build the outputs)
     -> [MWR: write syncronVar back]
     -> OUT (response to cores, message(s) to other SEs, loopback)
```

LK2 chooses one of three modes:

- **ST mode:** the entry hit, or a new entry is allocated.
- **Memory mode:** a lock at its Master SE with the ST full, or with the
  counter non-zero.
- **No-ST mode:** the message is forwarded, redirected as an `_OVERFLOW`
  message, or retried.

Without memory traffic, a lock acquire takes 7 cycles from entering the SE to
its grant. The budget is 12 cycles per message.

### Loopback queue

The SE sometimes has to send a message to itself: the lock re-acquire after a
condition wait, and retries while the ST is full. Those messages go to a
32-entry loopback queue beside the input buffer.

The two sources are served alternately. A message that keeps retrying
therefore cannot starve the buffer, which may hold exactly the release that
would free an entry.

A message is taken from the buffer only while the loopback queue has room for
16 more. This way the control logic can always finish what it started.

## The protocols

All state below lives in TableInfo (ST mode) or in VarInfo (memory mode).

**Lock.** TableInfo holds the owner:

| bit(s) | meaning |
|--------|---------|
| [63] | lock held |
| [62] | owner is an SE (global grant) |
| [61] | owner is a core of an overflowed SE |
| [5:4] | global ID |
| [3:0] | local ID |

At a non-master SE:

- The first local acquire sends one `LOCK_ACQUIRE_GLOBAL`. Later local
  acquires only set bits in the local waiting list.
- `gwl[own ID]` marks "global request outstanding".
- On a global grant, the first local waiter gets the lock.
- On each release, the lock passes to the next local waiter with no global
  message.
- When no local waiter is left, one `LOCK_RELEASE_GLOBAL` goes home.

The Master SE serves its own local waiters first, then the SEs in its global
waiting list.

The paper leaves fairness between units to future work; the threshold on
local grants it suggests is not built. A unit whose cores re-request a lock
quickly can therefore keep it from other units for a long time. The
end-to-end test shows this.

**Barrier.** Each core's wait carries the number of participants in
info[31:0]. TableInfo holds {participants, arrivals}.

- *Within-unit barrier:* the unit's SE counts arrivals. It releases everyone
  with one multicast response when the count is reached.
- *Across units, all 64 cores taking part:* each SE counts its own cores,
  then sends one `BARRIER_WAIT_GLOBAL` carrying that count. When the Master
  SE's total reaches 64, it sends `BARRIER_DEPART_GLOBAL` to every waiting
  SE, and each SE releases its cores.
- *Across units, fewer participants:* an SE cannot know how many of its own
  cores take part, so every arrival is forwarded to the Master SE
  individually.

**Semaphore.** The Master SE keeps {initial value [63:32], posts − grants
[31:0]}. A wait is granted while the initial value plus the balance is
positive. Otherwise it joins a waiting list, and a later post wakes the
first waiter. A non-master SE keeps at most one global wait outstanding and
hands each grant to a local core.

**Condition variable.** `COND_WAIT` names the lock it is called under.

1. The SE releases that lock through the loopback queue and parks the
   waiter.
2. A signal wakes one waiter; a broadcast (info[0] = 1) wakes all.
3. Each woken core first re-acquires its lock, again through the loopback
   queue, and only then gets its response. It therefore leaves the wait
   holding the lock, as condition-variable semantics require.

**Overflow (locks).** Suppose a lock acquire finds the ST full.

- At a non-master SE, the request is re-sent to the Master SE as
  `LOCK_ACQUIRE_OVERFLOW`, and the indexing counter is incremented.
- At the Master SE, the variable is read from memory as a syncronVar:
  Waitlist[4] × 16 bits, VarInfo 64 bits, OverflowInfo 8 bits.
  - OverflowInfo[3:0] marks the SEs that overflowed, and [7] is the lock
    state.
  - A waiting list that is all ones stands for a whole SE waiting globally.
    Single bits stand for individual cores of an overflowed SE.
  - Acquires increment the Master SE's counter, and releases decrement it.
  - Each overflow release is followed by a `DECREASE_INDEXING_COUNTER`
    message to the overflowed SE.

Barriers, semaphores and condition variables do not use memory when the ST
is full. Their messages wait in the loopback queue and retry until an entry
frees.

## Parameters

| parameter | default | where |
|-----------|---------|-------|
| NUM_UNITS, CORES_PER_UNIT | 4, 16 | `syncron_pkg` |
| UNIT_SEL_LSB | 32 | `syncron_pkg` |
| ST_ENTRIES | 64 | `syncron_top`, `sync_engine` |
| BUF_DEPTH | 16 (280 bytes) | `syncron_top`, `sync_engine` |
| IDX_ENTRIES, CNT_W | 256, 8 | `sync_engine` |
| LINK_LAT | 20 | `syncron_top` |

The following are this design's choices, not given by the source
description:

- the widths and encodings: opcode numbers, TableInfo and OverflowInfo bit
  use;
- the home-unit bits;
- the 8-bit counters (the 2304-byte figure quoted for 256 counters is not
  explained there);
- the loopback queue;
- the arbitration orders.

## How far it departs from the described design

- **Overflow** is built for locks only; other primitives retry instead (see
  above).
- **No lock fairness counter.** The source leaves it to future work.
- **The eight 64-bit SPU registers** are not modelled as such. The control
  logic keeps its state in its own flip-flops.
- **The local network** is an arbiter with a multicast response bus. The
  buffered crossbar with hop latencies is not modelled.
- **A barrier across units with fewer than all cores** is forwarded one
  level, message by message, rather than combined per unit.

## Simulating

Every testbench is self-checking and ends with
`TB_RESULT checks=N failures=M`. Build and run one with Verilator, for
example:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/syncron_pkg.sv tb/tb_syncron_top.sv --top-module tb_syncron_top
./obj_dir/Vtb_syncron_top
```

| testbench | what it shows |
|-----------|---------------|
| tb_msg_buffer | FIFO order, full/empty, count, against a reference queue |
| tb_sync_table | hit, index, entry, full flag, lowest free entry, occupancy |
| tb_index_counters | 2-cycle read, saturating updates |
| tb_local_net | one grant per cycle, round-robin bound of 15, multicast responses |
| tb_inter_unit_net | exact 20-cycle latency, in-order delivery per pair, back-pressure |
| tb_sync_req_if | message fields, blocking and non-blocking commit |
| tb_sync_engine | local and remote locks, local hand-over, barrier, Master SE grants, overflow through memory, 7 ≤ 12-cycle service |
| tb_syncron_top | the whole system at full size (below) |
| tb_workload_handover | 60 cores walking node chains with hand-over-hand locking (two locks held at once, as in a sorted linked list or fine-grained tree), over locks homed in all units; mutual exclusion and a clean finish |

`tb_syncron_top` runs the full 4 × 16 system at its default parameters.
Phases:

- **P0:** latency of a local and a remote lock.
- **P1:** 64 cores contending for one lock.
- **P2:** hierarchical barriers.
- **P3:** one-level barriers with 12 cores.
- **P4:** a within-unit barrier.
- **P5:** a semaphore with 3 resources (at most 3 holders).
- **P6:** a condition variable with signals and a broadcast.
- **P7:** 112 private locks that overflow two STs, while all 64 cores contend
  for a lock served from memory and a barrier retries behind a full table.

At the end, every ST must be empty, every indexing counter zero and every
syncronVar idle. Each mechanism (allocation, memory mode, redirect, retry,
local hand-over, global message) must have happened at least once. The run
takes about 20,000 cycles and a few seconds.

`tb/sync_mem_model.sv` is a behavioural memory for the syncronVar port: it
returns data a fixed number of cycles after a read.
