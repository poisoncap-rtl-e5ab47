# Poison capabilities in a CHERI data-memory hierarchy

On a CHERI machine every pointer is a capability: a 128-bit value with
bounds and permissions, plus a hidden tag bit in memory that says whether the
value is a valid capability. CHERI already stops a pointer from reaching
outside its bounds. It does not stop a pointer from being used after its
memory has been freed. Sweeping revocation closes that gap only once the
freed memory has been swept, before it is reused.

This design adds *poison capabilities*. When an allocator frees an object, it
overwrites every 16-byte word of the object with a poison capability: a
tagged word with a POISON bit set. That word also records the bounds of the
freed allocation and a 1-bit memory version. The memory pipeline checks each
load and store against what it finds in memory:

* **Use after free is stopped at once.** A load through a capability of the
  freed allocation traps. A store through it is dropped.
* **Nested allocators work.** An allocator whose capability is strictly
  broader than the poisoned allocation (a pool allocator above `malloc`, or
  `malloc` above a sub-allocator, or the kernel) can still read and write the
  memory. The allocator that freed the memory and everything below it cannot.
* **Initialisation safety.** Reused memory still holds poison of the old
  version. The new allocation gets the other version. A first write through
  it detoxes the word and zero-fills the part it does not write. A read before
  any write either reads zero or, if enabled, traps.
* **The caches can tell that memory is dead.** Both cache levels keep one bit
  per line that means "every word here is poison". Replacement evicts such
  lines before live ones.

This RTL covers the memory side of that scheme: two private L1 data caches
with the poison checks on their hit path, a shared last-level cache, and the
arbiter between them. The core is not included. It would decode the
instructions, deliver the traps and supply the decoded capability with each
access. The tag controller and DRAM are not included either.

```
 core 0 ──req/resp──► poison_l1d ──┐                     ┌──► mem_* ports
   (poison_load_check,             │                     │   (tag controller,
    poison_store_check,            ├─► llc_arbiter ─► poison_llc      DRAM)
    poison_line_detect,            │   (round robin)  (poison_line_detect,
    poison_victim_sel)             │                   poison_victim_sel)
 core 1 ──req/resp──► poison_l1d ──┘
```

## The poison capability word

A memory word is 128 data bits plus the CHERI tag (`cword_t`). A word is
*poisoned* when its tag is 1 and bit 127 is 1. Only these two bits are needed
to detect poison. That is why the line-level detector is cheap.

| bits    | field            | written by the poison store from the capability used |
|---------|------------------|-------------------------------------------------------|
| tag     | CHERI tag = 1    |                                                       |
| 127     | POISON = 1       |                                                       |
| 126     | version          | its memory version                                    |
| 125:64  | length (62 bits) | its length                                            |
| 63:0    | base             | its base                                              |

This layout is this design's own choice. The scheme needs a poison bit, a
version bit shared with ordinary capabilities, and the poisoned bounds.
Storing the bounds uncompressed as base and length keeps the bounds
comparison a pair of 65-bit compares. A compressed CHERI bounds format would
make it cheaper in registers. Lengths need at most 62 bits.

Capabilities arrive with each request already decoded (`cap_t`): tag,
`perm_poison`, version, 64-bit base and 64-bit length. The ordinary CHERI
bounds and permission checks of the access are left to the core.

## The access rules

Call the capability used for an access *C* and the poison word found at the
address *P*. *C* is **privileged** over *P* when either:

* *C* has `perm_poison` (in practice, kernel capabilities); or
* *C*'s bounds strictly contain *P*'s bounds: `C.base ≤ P.base`,
  `C.top ≥ P.top`, and the two bounds are not identical.

Equal bounds mean the same allocation layer. Narrower or partly overlapping
bounds (for example a pointer into the middle of the freed object) count as
the same layer. Both are denied.

| access               | word not poisoned            | P, C privileged                    | P, same version                             | P, other version                                                   |
|----------------------|------------------------------|------------------------------------|---------------------------------------------|--------------------------------------------------------------------|
| load                 | data                         | the word as stored (poison included) | trap `EXC_UAF`; in silent mode reads 0, no trap | reads 0; with `init_trap`, trap `EXC_UNINIT`                        |
| store (byte mask)    | bytes merged, tag kept only for a full tagged store | allowed, detox                     | **cancelled**, no trap                      | allowed, detox                                                     |
| poison store         | writes poison word from C    | writes poison word from C          | cancelled                                   | writes poison word from C                                          |
| CGetPoison probe     | `poisoned=0`                 | `poisoned=1`                       | `poisoned=1`                                | `poisoned=1`                                                       |

"Detox" means that every byte of the 16-byte word the store does not write
becomes zero, and the tag is cleared unless the store writes a whole tagged
word. Initialisation is therefore tracked per 16-byte word, not per byte. A
narrow first write leaves the rest of its word reading as zero.

Stores to poison are cancelled rather than trapped. A store commits before it
reaches the cache, so trapping would mean holding back every store until its
target had been read. The response's `store_cancelled` bit reports the cancel
for debugging. A cancelled store changes nothing.

A read through a privileged capability returns the poison capability itself,
tag included. The kernel copies pages that way, and the revoker reads poison
bounds that way.

### Versions and reuse

Each allocation is handed out with the version opposite to the poison left by
the previous one. A stale capability to the old object has the old version,
so it keeps trapping on every word that has not been rewritten. The new owner
can write (detox) and, with `init_trap` set, traps if it reads a word it has
not yet written. One bit is enough because a revocation sweep runs between
reuses and removes every capability that still points at poison of a
matching version.

### Nested allocators, by example

A sub-allocator holds a 4 KiB arena capability taken from `malloc`, and hands
out 64-byte objects. It frees object *O* by poison-storing each word of *O*
through *O*'s own capability. The poison then records *O*'s bounds.

* A program pointer to *O*, or into *O*, has equal or narrower bounds. It
  traps.
* The sub-allocator's arena capability has strictly broader bounds. It may
  read and rewrite *O*.
* `malloc`'s capability and kernel capabilities are broader still, or hold
  `perm_poison`. They may read and rewrite *O* too.

No allocator needs a permission bit or a shadow bitmap of its own.

## Poison-aware caches

`poison_line_detect` ANDs the poison bits of the four words of a 64-byte
line. The L1 recomputes a line's bit on every store that writes the line, and
when a line is filled. The LLC recomputes it when a line is written back from
an L1 and when a line is filled from memory. Because the test is per word,
several small freed objects packed next to each other add up to a fully
poisoned line.

On a miss, `poison_victim_sel` picks the way to evict in this order:

1. the lowest invalid way;
2. a fully poisoned way, searching upward from the set's round-robin pointer
   (with wrap-around);
3. the way under the round-robin pointer.

The round-robin pointer advances on every miss. Round robin is this design's
stand-in for the processor's own base policy, which is not specified.
Poisoned lines are still written back when they are dirty, because the
poison must reach memory.

## Interfaces and timing

All shared types are in `poisoncap_pkg`.

* **Core port** (per core): `core_req_valid`/`core_req_ready`/`core_req` with
  `core_req_t = {op, cap, addr, bmask, wdata}`.
  * `op` is `OP_LOAD`, `OP_STORE`, `OP_POISON` or `OP_GETPOISON`.
  * `addr` selects one 16-byte word.
  * `bmask` has one bit per byte of that word.
  * A load returns the whole word; selecting the bytes is left to the core.
  * The response is a one-cycle `core_resp_valid` pulse with
    `core_resp_t = {rdata, exc, store_cancelled, poisoned}`.
  * `ready` is high only while the cache is idle. Each cache is blocking.
* **Policy**: `cfg = {silent, init_trap}`. It is shared by all cores and
  sampled when the cache looks the request up.
* **Line ports** (L1→arbiter→LLC→memory): valid/ready plus
  `line_req_t = {we, addr, data}`. The responder answers every request with a
  one-cycle response pulse. A read returns the line. A write returns only an
  acknowledge.
* **Latency**: a hit in either cache responds 2 cycles after the request is
  presented: accepted on the first clock edge, looked up and answered on the
  second. A miss adds one line round trip to the next level. If the victim is
  dirty, it also adds a write-back round trip first.
* **Events**: `ev_l1[c]` = {line_poisoned, detox, store_cancel, writeback,
  evict_poisoned, miss, hit} (bit 6 down to 0). `ev_llc` = {writeback,
  evict_poisoned, miss, hit}. `ev_arb_conflict` pulses when two L1s want the
  LLC at the same time. These are single-cycle pulses for performance
  counters.

## Parameters

| module              | parameter        | default | meaning                                      |
|---------------------|------------------|---------|----------------------------------------------|
| `poisoncap_mem_top` | `NUM_CORES`      | 2       | cores, each with its own L1                  |
|                     | `L1_SIZE_BYTES`  | 32768   | L1 data cache capacity                       |
|                     | `L1_WAYS`        | 4       | L1 associativity                             |
|                     | `LLC_SIZE_BYTES` | 1048576 | shared cache capacity                        |
|                     | `LLC_WAYS`       | 16      | shared cache associativity                   |
| `poisoncap_pkg`     | `LINE_BYTES`     | 64      | line size (not a parameter of the caches)    |

The core count and cache geometry match the evaluated two-core system. The
line size, the blocking organisation and the handshakes are this design's own.

## Files

| file | contents |
|------|----------|
| `rtl/poisoncap_pkg.sv` | types, poison encoding, bounds test |
| `rtl/poison_load_check.sv` | load-path rules (combinational) |
| `rtl/poison_store_check.sv` | store-path rules, detox and zero-fill (combinational) |
| `rtl/poison_line_detect.sv` | "line is all poison" detector |
| `rtl/poison_victim_sel.sv` | poison-first victim choice |
| `rtl/poison_l1d.sv` | L1 data cache with the checks |
| `rtl/poison_llc.sv` | shared last-level cache |
| `rtl/llc_arbiter.sv` | round-robin arbiter, one transaction in flight |
| `rtl/poisoncap_mem_top.sv` | two-core hierarchy |
| `tb/tb_ref_pkg.sv` | independent reference model of the rules |
| `tb/tb_line_mem.sv` | behavioural tag controller and DRAM (sparse, fixed latency) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_juliet_patterns` |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops on its own.
A watchdog ends it as failed if it hangs. For example, the end-to-end test at
full size:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/poisoncap_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_line_mem.sv \
  tb/tb_poisoncap_mem_top.sv --top-module tb_poisoncap_mem_top -o sim
./obj_dir/sim
```

Building takes about 15 s, mostly for the 1 MiB LLC arrays. The run takes
under a second. The block testbenches build the same way from the package,
the block and its sub-blocks.

* **`tb_poison_load_check`, `tb_poison_store_check`**: directed cases for
  every row and column of the rule table, then 3000 random accesses compared
  with `tb_ref_pkg`.
* **`tb_poison_line_detect`, `tb_poison_victim_sel`**: exhaustive or random
  checks, for 4 and 16 ways.
* **`tb_poison_l1d`, `tb_poison_llc`**: a small cache, so that evictions
  happen. Each fills one set, poisons one line, and checks that the next miss
  evicts that line while the live lines still hit. Each checks the 2-cycle
  hit latency, then runs thousands of random operations against a flat
  reference memory.
* **`tb_llc_arbiter`**: routing of responses and alternation under
  contention.
* **`tb_poisoncap_mem_top`**: full-size hierarchy, both cores at once, object
  life cycles through a nested allocator, then random traffic. It counts
  every mechanism: hits, misses, poisoned evictions, write-backs in both
  caches, cancelled stores, detox, UAF and uninitialised traps, silent and
  automatic zeroing, privileged access, probes and arbiter contention. Any
  mechanism that never occurs counts as a failure.
* **`tb_juliet_patterns`**: the memory-level patterns behind use-after-free,
  double-free and uninitialised-read test programs, with bad cases caught and
  good cases passing.

## Limits and departures

* **Layout.** The bit layout of the poison word, the 64-byte line and the
  round-robin base policy are assumptions. So are the handshakes and the
  blocking caches. The real caches belong to an out-of-order core and accept
  many requests at once.
* **No coherence.** The two L1 caches are not kept coherent. Cores must not
  share lines. The end-to-end testbench gives each core its own region.
* **Narrow privileged writes.** A narrow store over poison made through a
  privileged capability also zero-fills the rest of its word. An allocator or
  kernel writing poisoned memory is expected to write whole words.
* **Who may poison.** Poison stores to unpoisoned memory are allowed through
  any capability. Authority to free is left to software holding the
  allocation's capability.
* **Poison bit on fills.** The line poison bit is also recomputed when a line
  is filled, not only when a store writes it, so poisoned lines arriving from
  memory are recognised.
* **Left out:**
  * the core;
  * decoding of the poison store, CGetPoison and CGetCapPoison instructions;
  * changing a capability's version;
  * the tag controller and DRAM;
  * the software revoker.

  The memory-side half of the poison store and of CGetPoison is implemented
  (`OP_POISON`, `OP_GETPOISON`).
* **Verification.** Correctness rests on simulation against the reference
  model, which was written separately from the RTL. Nothing has been formally
  verified. Nothing has been run on an FPGA.
