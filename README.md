# Capstone node subsystem: capability checks and a revocation tree in hardware

Capstone is a capability architecture that drops the usual assumption that
some privileged software can see and manage all of memory. Every pointer is
a 128-bit capability that names a memory region, the permissions it grants,
and a **revocation node**. Two ideas carry the design:

* **Linear capabilities** can only be moved, never copied. Whoever holds one
  knows that no one else can reach that memory. A linear capability can be
  turned into ordinary copyable (**non-linear**) capabilities when sharing
  is wanted.
* **Revocation without trusted software.** Each capability hangs off a node
  in a **revocation tree**. A holder can mint a *revocation capability*
  above its own capability. Later it can use that revocation capability to
  invalidate, in one operation, everything derived below it, wherever the
  copies have gone. A capability is usable only while its node is still in
  the tree.

This RTL builds the hardware that the two ideas need beside an ordinary
core:

* a capability register file that enforces the move-only rule;
* an execute step that applies the capability instructions' rules;
* an access check that tests type, permission and bounds;
* a **node controller** that keeps the revocation tree in DRAM;
* a small **node cache (N$)** in front of that DRAM.

Each memory access checks its capability at once. In parallel it looks up
the capability's node, which takes longer.

```
 core ── register ports ─► cap_regfile ── count events ─► event queue ─┐
 core ── execute port ──► cap_alu (reads register port A)              │
 core ── access port ───► cap_checker ◄── node valid ─┐                │
 core ── tree-op port ─┐                              │                │
                       ├─► arbiter ─► node_controller ─► node_cache ─► memory bus / DRAM
 access node query ────┘       ▲                                       │
                               └───────────────────────────────────────┘
```

The top module is `capstone_node_subsystem`. The core's pipeline, its L1
caches, the last-level cache, the memory bus and DRAM are outside this
design. Their connections are ports of the top.

## The 128-bit capability word

| bits     | field   | meaning |
|----------|---------|---------|
| 127:97   | node-id | revocation node (31 bits) |
| 96:94    | type    | 0 linear, 1 non-linear, 2 revocation, 3 uninitialized, 4 sealed, 5 sealed-return |
| 93:91    | perm    | 0 R, 1 RW, 2 RX, 3 RWX, other codes grant nothing |
| 90:64    | bounds  | compressed region (27 bits) |
| 63:0     | cursor  | the address the capability points at |

The type codes are this design's own; only the set of six types is fixed.
The bounds field uses CHERI's compressed-bounds encoding, which is not
rebuilt here. `cap_checker` therefore takes the decoded `base` and `end`
as inputs from the core.

`cap_checker` is purely combinational. An access is allowed when all of
these hold:

* **Type.** The type is linear, non-linear or uninitialized. Revocation and
  sealed capabilities grant no access at all.
* **Permission.**
  * A read needs R, RW, RX or RWX.
  * A write needs RW or RWX.
  * An execute needs RX or RWX.
  * Read and execute are refused through an uninitialized capability.
* **Bounds.** `base <= cursor` and `cursor + 2^size_log2 <= end`.
* **Node.** The node is valid. This input comes from the node query and
  arrives later, so it is ANDed in only at the output.

Two details need care.

* **Reads through RW.** The formal model's list of readable permissions
  leaves out RW. Its permission order, however, puts R below RW. This
  design follows the order, so RW grants reads.
* **Uninitialized capabilities.** Revoking a region that held linear
  capabilities may leave secrets behind, so the revoker gets the region
  back as an *uninitialized* capability. That capability can only write,
  and each write moves its cursor forward by one word (`next_cursor`,
  `WORD_BYTES` = 8). When the cursor reaches the end, the whole region has
  been overwritten and the capability may become linear again
  (`init_ok`).

## Move-only registers: `cap_regfile`

Each register is 128 bits plus a hidden tag bit that tells capabilities
from plain data. There are 32 registers, and register 0 reads as zero.
The register file applies one of three operations per cycle:

* **Write.** It raises a count increment if the new word is a non-linear
  capability, and a decrement if the overwritten word was one.
  * `w_update` marks a write that replaces a capability with a modified
    copy of itself, such as a new cursor. It changes no count.
* **Move (`mv_src` → `mv_dst`).**
  * The destination takes the source word.
  * The source is then cleared if it held a linear-kind capability:
    linear, revocation, uninitialized, sealed or sealed-return.
  * Because the clear comes last, moving a linear register onto itself
    destroys the capability. This matches the formal model.
  * Moving a non-linear capability is a copy: the copy raises an increment,
    and the overwritten destination, if non-linear, raises a decrement.
* **Store (`st_src`).** The core writes the word to memory. A linear source
  is cleared, and a non-linear one raises an increment for the new copy in
  memory.

Moving a linear capability never touches a count. This is where linearity
saves work. The events carry the node id of the capability concerned.

After reset, register 1 holds the **boot capability**. It is linear,
RWX, with all-ones bounds (all of memory), on node 1. The node controller
creates node 1 at reset for it (`BOOT_NODE`). The first software to run
splits and hands out parts of it. Using one boot capability in register 1
is this design's choice. The architecture only says that the registers
start with capabilities covering all of physical memory.

## Capability instructions: `cap_alu`

The instructions that reshape a capability are checked and carried out by
a purely combinational block. The core gives it the instruction, the
capability from register read port A with its decoded base and end, and
up to two integer operands. It answers whether the instruction is
allowed, the resulting register word or words, and which tree operation
the core must then issue.

| instruction | allowed on | result |
|-------------|------------|--------|
| TIGHTEN | any capability | the permission becomes the requested one if it is no stronger than the current one, otherwise no access |
| SHRINK  | linear, non-linear | new bounds [a, b) with base ≤ a < b ≤ end |
| SPLIT   | linear | [base, s) stays on the node; [s, end) goes on a new node (tree op SPLIT) |
| DELIN   | linear | non-linear (tree op DELIN) |
| SCC     | all but sealed, sealed-return and uninitialized | cursor set to a |
| LCC     | any capability | the cursor as an integer |
| MREV    | linear | a revocation capability for the same region on a new node (tree op MREV) |
| REVOKE  | revocation | uninitialized with its cursor at the base if a linear capability was revoked and the permission includes write, else linear (tree op REVOKE) |
| INIT    | uninitialized with cursor = end | linear |
| DROP    | all but non-linear | the register is cleared (tree op DROP) |
| SEAL    | linear with RW or RWX | sealed: the region now holds a domain's saved context |

The tree operation's answer, which is the new node or whether a linear
node was revoked, comes back on `new_node` and `lin_revoked`. Bounds go in
and out decoded, because the compressed-bounds encoder lies outside this
design. Call and return are domain switches that save and load the whole
register file; they belong to the core's control flow and are not handled
here.

Two rules differ between the architecture's prose and its formal model.
For SCC, the formal rule takes every capability type, but the prose
excludes sealed and uninitialized ones; the prose is followed. For REVOKE,
the prose speaks of any linear capability in the revoked subtree; that is
followed too.

## The revocation tree as a list

This is the heart of the design and the part that takes the most care.

### Node format

Each node is 128 bits, stored at `NODE_BASE + 16*id` in a DRAM region that
software cannot address.

| bits    | field   | use here |
|---------|---------|----------|
| 127:97  | depth   | depth in the tree, root = 0 |
| 96:66   | next    | next node in the list (or next free node) |
| 65:35   | prev    | previous node in the list |
| 34:2    | counter | bit 34 (counter[32]) = linear mark; bits 33:2 = reference count |
| 1       | freed   | node is on the free-nodes list |
| 0       | valid   | node is in the tree |

Id 0 is the root and always heads the list. The all-ones id means null.
The published node format has no type field, but revocation must know
whether any revoked node belonged to a linear capability. The top bit of
the counter is therefore used as that **linear mark**. The 32 bits left
are plenty for a reference count.

### Tree order, list order

The tree is never stored with child pointers. It is kept as one
doubly-linked list in **depth-first order**, with each node's depth
written in it. The subtree of node `n` is then a *contiguous run*: the
nodes after `n` whose depth is greater than `depth(n)`, up to the first
node that is not deeper. Every operation is a walk along `next` plus a
few pointer fixes.

Example. Root R has a child A, and A has children B and C, where C has a
child D. The list is

```
R(0) → A(1) → B(2) → C(2) → D(3) → …
```

The subtree of A is B, C, D: the run after A while the depth is above 1.

### Operations

| op | effect on the list |
|----|--------------------|
| `QUERY n`  | Reads n and answers `valid && !freed`. |
| `ALLOC`    | Takes a new node and links it right after the root at depth 1, as the first child of the root. This stands for `malloc` handing out a fresh linear capability. |
| `MREV n`   | Mints a revocation node x *between n and its parent*. x takes n's place in the list and n's depth. Then n and its whole subtree move one level down (depth + 1 along the run). x inherits n's linear mark, and n becomes linear. |
| `SPLIT n`  | Makes a new sibling x of n. It is linked in *after n's subtree* at n's depth, with n's linear mark. |
| `DELIN n`  | Clears n's linear mark. The capability is now copyable. |
| `REVOKE n` | Walks the run after n. Every node there is marked invalid, and freed if its count is zero. The walk also ORs together their linear marks. The whole run is then cut out of the list with one pointer fix at each end. n itself stays. |
| `DROP n`   | Removes n. Its children are adopted by its parent: each node in n's run has its depth lowered by one. n is unlinked and its own reference released. |
| `RC_INC n` | Adds one to the count. |
| `RC_DEC n` | Subtracts one. At zero, a still-valid node is first removed as in DROP. Then the node is freed. |

REVOKE also tells the core what type the revocation capability takes
afterwards (`op_rev_type` on the top):

* **uninitialized**, if some revoked node carried the linear mark *and*
  the revocation capability grants write (RW or RWX);
* **linear** otherwise.

In the first case the region may still hold data of a linear owner, so it
must be overwritten before it can be read.

The source of this rule has two readings. The prose says "any node in the
subtree", while the formal rule looks only at direct children. The prose
is followed.

### Invalid is not the same as free

A revoked node cannot be reused at once: capabilities that name it may
still sit in registers or memory. If the id were reused, those stale
capabilities would become valid again. So every node keeps a reference
count:

* a new node starts at 1, for the capability that names it;
* each copy of a non-linear capability adds 1;
* each overwritten copy subtracts 1.

A node goes onto the **free-nodes list** only when it is invalid *and*
its count is zero. The list is linked through the nodes' `next` fields and
its head is a register. Allocation pops this list. When the list is empty,
allocation takes the next never-used id, so DRAM is never scanned. Each
node is invalidated at most once and unlinked at most once, so a
revocation costs amortized constant time per node.

### Refused operations

`resp_err` is raised, and nothing changes, for any of these:

* an id that was never handed out;
* the root;
* MREV, SPLIT, DELIN, REVOKE or DROP on an invalid node;
* a count update on a freed node;
* a count that would go below zero;
* an exhausted id space.

The core is responsible for checking the operand capability's type, for
example that MREV is applied only to a linear capability.

### Timing

The controller handles one operation at a time. Each node it touches is
one request to the node cache, which answers a hit on the next cycle.
With every node in the cache:

* QUERY takes 5 cycles from acceptance to answer;
* RC_INC takes 7 cycles;
* REVOKE and DROP walk their run node by node. Each node costs a read and
  a write through the cache, so at least four cycles on hits.

A miss adds a DRAM round trip, plus a write-back if the victim line was
dirty.

## The node cache (N$)

`node_cache` is 8 kB and 2-way set associative, the configuration the
architecture was evaluated with. Its line is one node (16 bytes), giving
256 sets indexed by the low bits of the node id.

* Replacement is LRU.
* The cache is write-back.
* A write miss installs the line without fetching it, because the
  controller always writes whole nodes.
* Memory writes are posted. Reads come back as a `mem_resp_valid` pulse.
* Hit, miss and write-back counters are outputs.

## The top: `capstone_node_subsystem`

The top connects the register file, the instruction step, the checker,
the controller and the cache, and decides who uses the controller.

* **Access port.** The core presents the capability of a load, store or
  fetch, with its decoded base and end.
  * The type, permission and bounds check is done at once.
  * The capability's node goes to the controller as a QUERY.
  * `acc_resp_valid` comes when the query returns. `acc_ok` means every
    check passed, and `acc_fault` says which did not as
    {revoked, bounds, perm, type}.
* **Tree-op port.** The core's capability instructions issue tree
  operations here.
  * `op_perm` carries the revocation capability's permission, which decides
    the type after REVOKE.
* **Count-event queue.** Up to two register-file events per cycle enter a
  queue of `RC_FIFO` = 8 entries and go to the controller as RC_INC and
  RC_DEC.
  * An increment enters before a decrement of the same cycle. This way,
    replacing a copy with another copy of the same node cannot free it in
    between.
  * `rf_stall` rises when fewer than two entries are free. The core must
    then hold register operations; an assertion checks this.
  * `rc_idle` is high when no event is pending.
* **Arbitration.**
  1. The access query goes first, since loads wait on it.
  2. Queued count events come next.
  3. A tree operation is taken only when the queue is empty, so it always
     sees every count change made before it.

  `acc_waits` and `op_waits` count the cycles each side was held back.
* **Execute port (`cx_*`).** The capability in register read port A goes
  through `cap_alu` with the instruction and its operands. The core issues
  the tree operation it names on the tree-op port, feeds the answer back,
  and writes the results through the register ports.
* **Memory port.** The node cache's line requests go out here.

All ports use valid/ready handshakes and answer with one-cycle pulses.
Reset is asynchronous and active low. After reset the controller writes
the root and boot nodes; `init_done` rises when it is done.

## Parameters

| module | parameter | default | note |
|--------|-----------|---------|------|
| top | `NC_BYTES`, `NC_WAYS` | 8192, 2 | evaluated N$ size |
| top / node_cache | `NODE_BASE` | 0x8_0000_0000 | byte address of node 0 (own choice) |
| top / node_controller | `MAX_NODES` | 2^31−1 | full 31-bit id space; all-ones is null |
| node_controller | `BOOT_NODE` | 1 | create node 1 at reset for the boot capability |
| top / cap_checker | `WORD_BYTES` | 8 | cursor step of an uninitialized write |
| top / cap_regfile | `RF_NREGS` / `NREGS` | 32 | register count (own choice) |
| top | `RC_FIFO` | 8 | count-event queue depth, a power of two (own choice) |

## How far to trust it, and where it departs

These follow the architecture closely:

* the capability and node bit layouts;
* the permission and type predicates;
* the linear move rule;
* the depth-first list with depths, unlinking of revoked runs, reference
  counts and the free-nodes list;
* the tree effects of each operation;
* each capability instruction's preconditions and results;
* the query in parallel with the access;
* the N$ size and associativity.

These are this design's own choices:

* the type codes;
* node 0 as root and all-ones as null;
* where new nodes go in the list;
* the linear mark in the counter's top bit;
* starting counts of 1;
* the never-used-id pointer;
* the event queue and the arbitration order;
* all handshakes;
* line size, replacement and write policy of the N$;
* the boot register and boot node.

Points where the source material disagrees with itself, and the reading
taken:

* **RW and reads.** RW is taken to be readable.
* **Revoke result.** The whole subtree decides it, not only direct
  children.
* **SCC.** Refused for sealed, sealed-return and uninitialized
  capabilities, as the prose says; the formal rule allows all types.
* **Uninitialized writes.** The prose says they are allowed "regardless
  of the recorded permissions", but the formal rule requires RW or RWX.
  The formal rule is followed. Revocation only yields uninitialized
  capabilities with a writable permission, so the two agree in practice.

Not built:

* the core pipeline and its instruction decoding;
* call and return (domain switching), interrupts and attestation;
* the L1 caches, last-level cache and memory bus, which are ordinary;
* the per-16-byte tag bits in DRAM;
* the compressed-bounds encoder and decoder. The checker takes decoded
  bounds, so a bounds codec must sit in front of it.

Linting reports a few unused-signal warnings. They come from capability
fields a block does not need, such as `cap_checker` ignoring node-id and
the compressed bounds. It also reports a sync/async warning for `rst_n`,
because `rst_n` is both the asynchronous reset and the `disable iff` of
the handshake assertions. Both are expected.

## Simulating

Every file starts with a comment on what it does, its interface and its
timing. Testbenches are self-checking: they print
`TB_RESULT checks=N failures=M`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Mdir obj --top-module tb_capstone_node_subsystem \
  rtl/capstone_pkg.sv rtl/cap_checker.sv rtl/cap_regfile.sv rtl/node_cache.sv \
  rtl/node_controller.sv rtl/capstone_node_subsystem.sv \
  tb/node_mem_model.sv tb/tb_capstone_node_subsystem.sv
./obj/Vtb_capstone_node_subsystem
```

`tb/node_mem_model.sv` is a behavioural DRAM with a fixed read latency.
It is not part of the design.

| testbench | what it checks |
|-----------|----------------|
| `tb_cap_checker` | every type × permission × access kind, bounds edges, revoked nodes, the uninitialized cursor step and `init_ok`; 20000 random cases against a predicate model |
| `tb_cap_regfile` | reset state, linear and self moves, copies, stores, in-place updates, register 0; 20000 random operations with every register and event compared against a model |
| `tb_cap_alu` | every instruction × type × permission, the edges of SPLIT, SHRINK, INIT and REVOKE, untagged operands; 30000 random instructions compared field by field with the instruction rules |
| `tb_node_cache` | misses, fills, write hits, write misses without fill, LRU victims and write-back data, hit latency of 1 cycle; 6000 random operations against a shadow memory and a reference LRU |
| `tb_node_controller` | nested MREV, DELIN, REVOKE results, free and reuse, QUERY and RC_INC latencies; 3000 random operations against a parent-pointer model of the tree, with the whole list walked and checked (links, depths, DFS order) after each one |
| `tb_capstone_node_subsystem` | the whole top at default parameters; see below |
| `tb_workload_spec_mix` | the SPEC CPU 2017 intspeed operation mixes, scaled down; see below |

### End-to-end test

`tb_capstone_node_subsystem` runs the top with all defaults: an 8 kB N$,
the full id space and DRAM with 40 cycles of latency. It plays an
allocator-heavy program:

* `malloc` is ALLOC followed by MREV.
* Pointers are shared (DELIN), copied and overwritten.
* Objects are split.
* `free` is a REVOKE. Then a stale access must fail. If the revoke returned
  an uninitialized capability, its region is written through it. Finally
  the last copies are dropped.

The boot capability is also put through the execute port: SHRINK, SPLIT,
TIGHTEN, SEAL, a refused INIT, and an empty register.

A phase drives the register file with loads, moves, stores and overwrites.
Its count events then decide whether every node is later freed at exactly
the right moment.

A reference model predicts every answer. The test also fails if any named
mechanism never happened. The run takes about 660k cycles, under two
seconds.

### Workload replay

`tb_workload_spec_mix` replays the mix of allocations, queries,
reference-count updates and revocations published for each SPEC CPU 2017
intspeed run:

* about 4000 operations per run, in the published proportions;
* over a pre-filled heap of 1200 objects.

It checks that nothing is refused, that live objects stay reachable and
freed ones do not, and that the controller's counters agree with what was
issued. The heap size behind the published numbers is unknown, so the N$
miss rates it prints describe this synthetic heap, not the real programs.

At full size, every run fits the design: even the run with the most
allocations needs under a million node ids out of 2^31.
