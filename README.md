# Time-predictable virtual memory for a 64-bit RISC-V core

When a hypervisor time-shares one core between a real-time virtual machine
and a general-purpose one, the general-purpose guest fills the TLBs and the
L1 caches with its own state. When the real-time guest is scheduled again,
its translations have to be walked again and its data fetched again from
memory. Its execution time then depends on what the other guest happened to
do, and the worst case becomes wide and hard to bound.

This RTL provides the memory side of a CVA6-class core (Sv39, 64 bit) with
three hardware mechanisms that software can switch on at run time to
remove that dependence:

1. **TLB partitioning.** The pseudo-LRU replacement tree of each TLB can be
   restricted to a subset of the entries. The hypervisor gives every guest
   its own subset, so a guest can only evict its own translations.
2. **TLB locking.** Up to eight translations can be pinned. A pinned
   translation always hits, never needs a walk and can never be evicted.
3. **Hybrid cache / scratchpad.** Any way of the instruction or data cache
   can be switched into scratchpad (SPM) mode. It then becomes plain,
   software-managed memory in a fixed physical window: no misses, no
   eviction, single-cycle access.

All three are controlled through custom CSRs, so a hypervisor can change
them on every VM switch.

## Block structure

```
 fetch (VA) ──► MMU ─ ITLB ─┐                ┌─► I$ arbiter ─► hybrid I$ ─► instruction memory
                            ├─ page-table ───┤   (fetch first)   (cache ctrl + SPM ctrl + SRAMs)
 load/store (VA) ─► MMU ─ DTLB┘  walker      └─► D$ arbiter ─► hybrid D$ ─► data memory
                                                 (walker first)  (cache ctrl + SPM ctrl + SRAMs)
 CSR writes ─► vmrt_csr ─► CUR_PART, lock slots (to both TLBs), SPM way masks (to both caches)
```

| Module         | Role |
|----------------|------|
| `vmrt_pkg`     | Widths, default sizes, CSR numbers, SPM windows, shared structs |
| `part_plru`    | Tree pseudo-LRU with partition and lock constraints |
| `tlb`          | 16-entry fully associative TLB (used as ITLB and DTLB) |
| `vmrt_csr`     | Custom CSRs: partitions, lock slots, SPM way masks |
| `ptw`          | Sv39 page-table walker |
| `mmu`          | ITLB, DTLB, walker, permission checks |
| `sram_sp`      | Single-port SRAM with byte enables (data and tag arrays) |
| `spm_ctrl`     | Address decoder and scratchpad controller of a hybrid cache |
| `cache_ctrl`   | Blocking set-associative cache controller that avoids SPM ways |
| `hybrid_cache` | One hybrid L1 cache: controllers, multiplexer, SRAMs |
| `req_arb2`     | Two-requester fixed-priority arbiter in front of each cache |
| `cva6_vmrt`    | Top level: everything above |

The core pipeline (frontend, load/store unit, issue and execute stages,
standard CSR file) is not part of this RTL. Its signals are ports of
`cva6_vmrt`: a virtual fetch port, a virtual load/store port, a CSR
read/write port, the translation controls (`satp` PPN, ASID, VMID,
enable, TLB flush), and one memory port per cache.

## The partitioned pseudo-LRU tree

This is the part that needs the most care. A 16-entry TLB uses a binary
tree of 15 direction bits. The leaves are the entries. To find the next
victim, hardware starts at the root and follows each node's bit. When an
entry is used (hit or refill), every bit on its path is set to point away
from it.

Partitioning adds a constraint on this walk. `CUR_PART` is a bitmap of
`PARTS` bits. Partition *p* covers the entries
`[p*ENTRIES/PARTS, (p+1)*ENTRIES/PARTS)`; with the default of 16 partitions
each partition is one entry. An entry is *reachable* if its partition bit
is set and no lock slot occupies it. `part_plru` computes reachability
bottom-up over the tree in one pass: a node is reachable if either child
is.

The victim walk then uses an *effective* direction at each node:

* it follows the stored bit if that child's subtree is reachable;
* otherwise it takes the other child.

The walk therefore always ends on a reachable entry, and
`victim_valid_o` is low only if nothing is reachable. In that case a
refill is dropped: the translation is still used for the access that
needed it, but it is not stored.

The stored bits are updated exactly as in ordinary PLRU. Partitioning
never rewrites the tree. As a result, a guest that owns half the tree sees
ordinary PLRU behaviour inside its half, and switching `CUR_PART` costs no
time.

A worked case uses an 8-entry tree. Suppose the stored bits lead to
entry 4, and entry 4 is then locked. At the last node the stored bit
points at entry 4, which is now unreachable, so the walk takes its sibling,
entry 5. The other bits are untouched: when the lock is released, entry 4
is the victim again. Similarly, if only entries 0–3 are enabled and the
root points right, the walk turns left at the root and continues with the
stored bits below it.
The testbench `tb_part_plru` checks this and other
hand-worked cases, and also compares 6000 random steps with an
independent behavioural model.

## Switching partitions on a trap

Three CSRs let a hypervisor switch partitions atomically around a trap:

| CSR | Number | Behaviour |
|-----|--------|-----------|
| `CUR_PART` | 0x5C0 | Active bitmap. A write first copies the old value into `LAST_PART`. |
| `LAST_PART` | 0x5C1 | Saved bitmap. Also directly writable. |
| `RESTORE_LAST_PART` | 0x5C2 | Writing with bit 0 set copies `LAST_PART` into `CUR_PART`. `LAST_PART` is left unchanged. |

The intended sequence is as follows:

1. On trap entry, the handler writes its own partition to `CUR_PART`. The
   guest's partition is saved automatically.
2. To schedule a different guest, the handler writes that guest's bitmap to
   `LAST_PART`.
3. On return, one write to `RESTORE_LAST_PART` activates it.

After reset both bitmaps are all ones. The TLB then behaves like a plain
PLRU TLB.

## Lock slots

Each of the `LOCKS` (8) slots is described by three CSRs, starting at
0x5C8. Slot *k* uses the CSRs `0x5C8 + 3k + {0,1,2}`:

| Offset | Contents |
|--------|----------|
| +0 | `{valid[63], page size[62:61] (0 = 4 KiB, 1 = 2 MiB, 2 = 1 GiB), VPN[26:0]}` |
| +1 | Leaf PTE in Sv39 format. The slot needs its V bit. |
| +2 | `{valid[63], VMID[45:32], ASID[15:0]}` |

A slot is active only if all three parts are valid. An active slot k
replaces TLB entry k in both TLBs and is marked unreachable for the
replacement tree. It therefore hits like any entry, survives a TLB flush,
and is never a victim. Software should take lock slots from a partition it
does not need. In a typical setup these are the general-purpose guest's
entries.

## Hybrid caches

Each L1 cache is set-associative:

* The I$ is 16 KiB: 4 ways × 256 sets × 16-byte lines.
* The D$ is 32 KiB: 8 ways × 256 sets × 16-byte lines.

The ways are physical SRAMs shared by two controllers. A multiplexer gives
each SRAM either to the cache controller or to the scratchpad controller.

**SPM mode.** `IC_SPM` (0x5C3) and `DC_SPM` (0x5C4) hold one bit per way.
A set bit puts that way in scratchpad mode.

**Address window.** Each cache owns a physical window the size of the whole
cache:

* I$: starting at `0x7000_0000`;
* D$: starting at `0x7100_0000`.

The address decoder maps the window onto the ways contiguously, way 0
first. Each way is 4 KiB. Within the window:

* way = `offset[13:12]` for the I$, `offset[14:12]` for the D$;
* SRAM row = `offset[11:4]`;
* 64-bit word within the line = `offset[3]`.

The window does not move when the configuration changes, so a way keeps
its address.

**Scratchpad access.** An access to the window is served by the SPM
controller. It takes one cycle and never goes to memory. If the addressed
way is not in SPM mode:

* a write is dropped;
* a read returns zero.

A cache line therefore can never be corrupted through the window.

**Cache side.** The cache controller:

* never hits in, refills into or evicts from an SPM way;
* picks as victim the first invalid cache-mode way, else the next one in
  round-robin order.

**Mode changes.** When a way changes mode, in either direction, its valid
bits are cleared in the same cycle. The controller then writes zero into
every tag row of that way, one row per cycle (256 cycles at the default
size). It accepts no request meanwhile, scratchpad accesses included. A way
handed back to the cache therefore starts empty, and no stale tag survives.
Mode changes are meant to be rare (at boot or at a VM switch), so this
pause is a one-off cost.

**Write policy.** The D$ is write-through without write-allocate. The I$
is read-only from memory.

The 50 % split used in the reference configuration is:

* `DC_SPM = 0xF0`: 16 KiB data scratchpad, ways 4–7 at `0x7100_4000`;
* `IC_SPM = 0x0C`: 8 KiB instruction scratchpad, ways 2–3 at `0x7000_2000`.

Loads and stores that hit the instruction scratchpad window are routed to
the I$ (fetches have priority there). This is how code gets into the
instruction scratchpad.

## MMU and page-table walker

**Lookup.** Both TLBs are looked up combinationally. On a hit, the request
leaves for its cache in the same cycle with the physical address, so a hit
or a locked translation adds no latency.

**Miss.** On a miss, the request is held and the walker starts:

* an ITLB miss wins if both TLBs miss;
* no new walk starts in the cycle a refill or fault is reported.

**Walk.** The walker is a standard three-level Sv39 walk. It reads PTEs
through the D$ port and has priority over the load/store unit there. It
raises a page fault for:

* an invalid PTE;
* W set without R;
* a misaligned superpage;
* a pointer PTE at the last level.

A walk that succeeds refills the TLB that missed, into the victim that
`part_plru` chooses.

**Faults.** A faulting walk, or a hit without the needed permission, is
reported on `fetch_fault_o` / `lsu_fault_o` in the cycle the request is
consumed. The permissions needed are X for fetch, R for load and W for
store.

**Tags.** Entries are tagged with ASID and VMID, so guests never match
each other's translations.

## Timing summary

| Path | Latency |
|------|---------|
| TLB hit / locked hit | 0 extra cycles |
| Page walk | 3 × (D$ access), each a hit or a 16-byte line refill |
| D$ / I$ hit | Answer 1 cycle after the request is accepted (SRAM read, then tag compare); blocking, one request at a time |
| Miss | Hit time + memory latency |
| Scratchpad | Answer 1 cycle after acceptance, always; never a miss |
| CSR write | Effective on the next clock edge |
| CSR read | Combinational |

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|-----------|----------------|
| `tb_part_plru` | Hand-worked partition and lock cases; 6000 random steps against a reference model |
| `tb_tlb` | Hits and misses, ASID/VMID tagging, superpages, partition-restricted refill, locked entries surviving flush and refill |
| `tb_vmrt_csr` | `LAST_PART` save and restore, lock-slot validity, SPM masks, read-back |
| `tb_ptw` | 4 KiB / 2 MiB / 1 GiB walks; every fault case, including misaligned superpages |
| `tb_mmu` | Translation, walks for both TLBs, permission faults |
| `tb_sram_sp` | Byte-enable writes and read timing against a model |
| `tb_spm_ctrl` | Address decoding, dropped writes, dummy reads, one-cycle responses |
| `tb_cache_ctrl` | Hits, refills, write-through, SPM ways untouched, invalidation on mode change |
| `tb_hybrid_cache` | D$ and I$ instances with a 50 % split; cache and scratchpad traffic mixed |
| `tb_cva6_vmrt` | End to end, at the default configuration |

`tb_mem_model` is a behavioural memory with fixed latency, used by the
larger testbenches.

**End-to-end scenario.** `tb_cva6_vmrt` builds a page table in memory that
maps 512 pages. It then switches between a "critical" and a "noisy" guest
with the trap sequence described above. The critical task loads from eight
pages. Its cycle count is measured in each setup (memory latency 20
cycles):

| Setup | Cycles |
|-------|--------|
| Isolated, after priming | 16 |
| After the noisy guest touched 64 pages, no protection | 80 (every translation walked again) |
| TLB partitioned (`0xFF00` critical, `0x0001` hypervisor, `0x00FE` noisy), after noise | 16, no walks |
| Locked translations onto the data scratchpad, with or without noise | 16, identical |

The same test also covers:

* fetches through the ITLB;
* code stored into the instruction scratchpad and fetched through a locked
  translation;
* a dropped write and dummy read on a cache-mode way;
* a page fault;
* write-through to memory.

It counts every one of these events and fails if any of them never
happened.

**Synthetic interference benchmark.** `tb_synthetic_bench` runs the
classic experiment for this kind of design on the default configuration.
The critical guest loads once from each of 16 pages, as many pages as the
DTLB has entries. It does this in reverse order after priming, so it does
not evict its own entries. Between two runs the noisy guest touches 2–40
random pages, four lines each. Sixteen runs per setup give (simulator seed 1, memory
latency 20 cycles):

| Setup | Mean cycles | Std. dev. | Critical walks |
|-------|-------------|-----------|----------------|
| a: isolated | 32.0 | 0 | 0 |
| b: noise, no mitigation | 384.1 | 112.5 | 256 |
| c: noise, partitioned (critical half = 8 entries < 16 pages) | 414.4 | 100.5 | 256 |
| d: noise, one locked 2 MiB translation | 164.0 | 68.3 | 0 |
| e: noise, partitioned + locked | 180.5 | 80.7 | 0 |
| f: noise, locked + data scratchpad | 32.0 | 0 | 0 |

What these rows show:

* **Partitioning alone** (c) cannot help a guest whose working set is
  larger than its share of the tree.
* **Locking** (d, e) removes every page walk. The spread that remains comes
  from D$ conflicts.
* **Locking plus the scratchpad** (f) removes that too: the run time does
  not vary and equals the isolated time.

The testbench checks these relations, not the exact numbers.

**Fault copies.** For every module there is a deliberately broken copy,
used to confirm that the testbench detects the change. For example, an SPM
window routed to the wrong cache makes the end-to-end test fail 8 checks.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
    rtl/vmrt_pkg.sv tb/tb_cva6_vmrt.sv --top-module tb_cva6_vmrt
./obj_dir/Vtb_cva6_vmrt
```

Replace the testbench name to run any other one. The package must come
first on the command line; everything else is found through `-y`.

Sizes are parameters of `cva6_vmrt` and default to the reference
configuration:

| Parameter | Default |
|-----------|---------|
| `ENTRIES` | 16 |
| `PARTS` | 16 |
| `LOCKS` | 8 |
| `IC_NWAY` | 4 |
| `DC_NWAY` | 8 |
| `SETS` | 256 |

`PARTS` must divide `ENTRIES`, and `ENTRIES` must be a power of two.
Changing `SETS` or the way count changes the cache sizes and the SPM
window sizes together. The window bases and CSR numbers are in `vmrt_pkg`.

## Departures and limits

* **Translation.** Only single-stage Sv39 translation is built. The
  G-stage (guest-physical) walk of the hypervisor extension is missing,
  and so are hardware A/D-bit updates and U/S privilege checks. Guests are
  separated by their VMID/ASID tags.
* **CSR details.** The CSR numbers and bit layouts are this design's own
  choice. A lock slot holds both an ASID and a VMID, and both must match. So are the all-ones reset value of the partition bitmaps and the
  rule that lock slot k sits on TLB entry k.
* **Cache organisation.** Way counts, line size, round-robin replacement,
  the write-through policy and the SPM window addresses follow common CVA6
  practice. They are not taken from a specification.
* **Memory.** The SRAMs are written as plain arrays, not technology macros.
  The memory ports are a simple valid/ready line interface rather than
  AXI.
* **Not measured.** Area and clock frequency cannot be assessed here. The
  measured scenarios above are a small deterministic model of the
  interference experiment, not a statistical evaluation.
