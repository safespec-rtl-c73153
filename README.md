# SafeSpec cache and TLB path in SystemVerilog

Speculative execution leaves footprints. A load on a mispredicted path, or a load that
reads a kernel address it will later fault on, still brings its line into the data cache
and its translation into the TLB. Spectre and Meltdown read those footprints back through
a cache timing channel. SafeSpec ("SafeSpec: Banishing the Spectre of a Meltdown with
Leakage-Free Speculation", Khasawneh et al.) removes the footprint itself. Everything a
speculative instruction brings in is kept in a *shadow* structure next to the normal one.
The committed caches and TLBs change only when that instruction retires. A squashed
instruction's shadow entries are simply freed, so the committed state never sees it, not
even its replacement order.

This RTL builds that idea for the four structures the proposal protects: the L1
instruction cache, the L1 data cache, the iTLB and the dTLB. Each one gets a shadow
twin. Entries move with the *wait-for-commit* (WFC) policy: an entry becomes permanent
when the instruction that fetched it retires. This is the policy that also stops
Meltdown. The out-of-order core around it, the L2/L3/DRAM below it and the page walker
are not part of this RTL. Their signals are ports of the top module, and the testbenches
stand in for them.

## Structure

```
safespec_top
├── u_iside : safespec_side  (instruction fetch; pointers kept per ROB entry)
│   ├── u_tlb          assoc_store   iTLB, 64 entries (16 sets x 4 ways)
│   ├── u_shadow_tlb   shadow_table  shadow iTLB, 224 entries
│   ├── u_l1           assoc_store   L1 i-cache, 32 KB (64 sets x 8 ways x 64 B)
│   ├── u_shadow_cache shadow_table  shadow i-cache, 224 lines
│   ├── u_ptr          ptr_table     shadow pointers, one slot per ROB entry (224)
│   ├── u_mem_filter   miss_filter   outstanding line reads
│   └── u_walk_filter  miss_filter   outstanding page walks
└── u_dside : safespec_side  (loads and committed stores; pointers kept per load-queue entry)
    └── same parts: dTLB 64, shadow dTLB 72, L1 d-cache 32 KB, shadow d-cache 72 lines,
        72 pointer slots, two filters
```

All files are in `rtl/`. The shared widths and types are in `safespec_pkg.sv`: 48-bit
virtual addresses, 40-bit physical addresses, 4 KB pages and 64-byte lines. A line
address is 34 bits and a page number is 36.

## Ownership: who may see a shadow entry

This part needs the most care. Every shadow entry records its *owner*, the ROB index of
the instruction that caused the fill. It also has a state: FREE, SPEC (owner still
speculative) or CMT (owner has retired). Each rule below is there to stop one kind of
leak.

* **Visibility.** A SPEC entry is visible to its owner and to instructions younger than
  the owner. Age is the distance from the ROB head, so wrap-around is handled. The
  proposal allows instructions "in the same execution branch" as the filling load to use
  the line. In a core that squashes wrong-path instructions as soon as a branch
  resolves, every instruction still in flight is on one path, so "younger than the
  owner" expresses that rule. Older instructions do not see the entry. Without this, an
  older load that will retire could time a hit on a line fetched by a younger load that
  will be squashed, for example the dependent load of a Meltdown gadget. It then fetches
  its own copy, and the shadow structure may hold the same line twice. CMT entries are
  visible to everyone.
* **Commit.** When an instruction retires, the core sends its ROB index, and for loads
  its load-queue index, on one of six commit lanes. `ptr_table` looks up the shadow
  entries that instruction allocated. An entry is marked CMT only if its recorded owner
  equals the retiring ROB index. A stale pointer left behind by a squashed instruction
  therefore never commits someone else's entry.
* **Drain.** CMT entries are copied into the L1 or TLB, one entry per structure per
  cycle, and then freed. Until it drains, a CMT entry answers lookups like the L1 would.
  Each line drained into an L1 is also announced on `iinst_*` / `dinst_*`, so that the
  inclusive outer levels can install it.
* **Squash.** `sq_valid` with `sq_rob` squashes that instruction and every younger one.
  In the same cycle, every SPEC entry owned by a squashed instruction becomes FREE. An
  access in progress for a squashed instruction is abandoned.
* **Replacement state.** The L1s and TLBs use round-robin victim selection, and only a
  fill advances the pointer. Fills come only from drained CMT entries, so speculative
  work changes nothing in the committed structures.
* **Stores.** Under TSO a store reaches the cache only at retirement, so stores have no
  shadow state. A committed store (`st_*`: line address, 64-byte data, byte enables)
  merges into the d-cache line if it is present, and into every shadow copy of that
  line. No shadow copy can then be older than the cache. Stores do not allocate on a
  miss. Write-through to the next level is the store queue's job and is not part of
  this RTL.

## One access, cycle by cycle

Each side has one access port. `req_ready` is high when the side is idle, and one access
is in flight at a time. An accepted request goes through these steps:

1. **LOOKUP** (the cycle after acceptance). The page number is looked up in the TLB and
   in the shadow TLB, under the visibility rule. If both miss, a page walk is issued.
   The walker's reply is written into the shadow TLB, owned by this instruction, and
   never directly into the TLB. LOOKUP then repeats. With a translation in hand, the
   physical line address is looked up in the L1 and in the shadow cache.
2. **Hit** in either place: the response comes `HIT_LAT` = 4 cycles after the accept
   edge. The L1 and the shadow cache have the same latency, following the proposal's
   assumption that the shadow state is as fast as the L1.
3. **Miss**: a line read goes to the next level. The returned line is written into the
   shadow cache, owned by this instruction, and the response follows one cycle later.
   If the shadow structure is full, the fill waits for a free entry. With the default
   sizes this cannot happen for instructions in flight (see below).
4. **Response**: `rsp_line` (the whole 64-byte line), `rsp_laddr` and `rsp_src`. The
   source is one of L1, SHADOW, FILL, or FAULT (no translation, nothing accessed).
   `rsp_perm_fault` is set when a user-mode access touches a supervisor page. As in an
   unprotected core, such an access still runs speculatively and the core raises the
   fault at retirement. The difference is that its line and translation exist only in
   shadow entries, and the squash that follows the fault erases them.
5. If the access allocated shadow entries, their indices are written into the
   instruction's pointer slot. This is the load-queue slot on the data side and the ROB
   slot on the instruction side.

On the instruction side, each fetch is tagged with the ROB index that the first
instruction of the fetched line will occupy. This is how fetched lines get an owner
before the instruction exists. It is this implementation's choice.

## Late replies

A squash can arrive while a line read or page walk is still outstanding. Each side keeps
a `miss_filter` per request type. It records the owner of every outstanding transaction,
under the same id that travels with the request. A squash marks the transactions of
squashed owners dead. When a dead reply arrives, or a reply in the same cycle as the
squash that kills it, it is dropped and never written anywhere. Its id stays reserved
until then, so a new request cannot reuse it. The access port becomes free as soon as
the squash happens. `dropped_reply` pulses for each reply that is thrown away.

## Sizing against transient speculation attacks

Shadow structures create a new covert channel of their own. If a shadow structure can
fill up, a wrong-path "Trojan" can evict, or delay, the shadow entries of a path that
will retire. That path then observes the difference after it commits. The proposal
closes this channel by giving every instruction that could hold an entry a slot of its
own:

| Structure       | Bound                           | Default |
|-----------------|---------------------------------|---------|
| shadow d-cache  | one per load-queue entry        | 72      |
| shadow dTLB     | one per load-queue entry        | 72      |
| shadow i-cache  | one per ROB entry               | 224     |
| shadow iTLB     | one per ROB entry               | 224     |

Each instruction allocates at most one line and one translation. The proposal states the
data-side bound as the size of the load-store queue. Only loads own shadow entries here,
so the 72-entry load queue is used rather than loads plus stores (128). The proposal
also reports a cheaper sizing for typical programs: about 25 i-cache lines, under 10
iTLB entries and up to 25 dTLB entries. That sizing is reached by overriding
`SHIC_N`, `SHITLB_N` and `SHDTLB_N`, but it is no longer contention-free.

A second-order effect also remains: committed entries occupy their slots until they
drain. At one drain per cycle and six commits per cycle, a burst of committed fills can
keep entries busy for a few cycles after their owners retire.

## Parameters of `safespec_top`

| Parameter  | Default | Origin |
|------------|---------|--------|
| `ROB_N`    | 224 | core configuration (224-entry ROB) |
| `LQ_N`     | 72  | core configuration (72-entry load queue) |
| `SHIC_N`, `SHITLB_N` | 224 | worst-case bound = ROB |
| `SHDC_N`, `SHDTLB_N` | 72  | worst-case bound = load queue |
| `L1_SETS`, `L1_WAYS` | 64, 8 | 32 KB, 8-way, 64 B lines |
| `TLB_SETS`, `TLB_WAYS` | 16, 4 | 64 entries; 4-way is this design's choice |
| `HIT_LAT`  | 4   | L1 hit latency, also used for the shadow structures |
| `TXNS`     | 8   | outstanding transactions per filter; this design's choice |
| `CM_W`     | 6   | retirement width (6 micro-ops per cycle) |

## Ports of `safespec_top`

* `rob_head`: ROB index of the oldest instruction in flight. All age comparisons use it.
* `if_req_*` / `if_rsp_*`: instruction fetch (virtual address, ROB tag, user mode) and
  its line.
* `ld_req_*` / `ld_rsp_*`: loads, which also carry the load-queue index.
* `cm_valid`, `cm_rob`, `cm_is_load`, `cm_lq`: up to `CM_W` retirements per cycle.
  `cm_is_load` routes a lane to the data side as well.
* `sq_valid`, `sq_rob`: squash this instruction and everything younger.
* `st_*`: committed stores.
* `imem_*`, `dmem_*`: line reads to the next level. Requests carry an id, replies return
  the id and the line, and replies may arrive in any order.
* `iwalk_*`, `dwalk_*`: page-walk requests and replies (page table entry, or fault).
* `iinst_*`, `dinst_*`: committed lines to install in the inclusive outer levels.
* `sh*_occupancy`, `dropped_reply`: monitoring only.

## Simulating

The testbenches are in `tb/`. Each one is self-checking and prints
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|-----------|----------------|
| `tb_shadow_table` | fill order, visibility by age (including ROB wrap), owner-checked commit, squash, drain, store merge, blocking when full |
| `tb_assoc_store`  | hits, in-place refill, round-robin order per set, store merge, no store allocate |
| `tb_ptr_table`    | random pointer writes against a reference array |
| `tb_miss_filter`  | id allocation, live and dropped replies, squash in the reply cycle |
| `tb_safespec_side`| one side at reduced size: walk, fill, 4-cycle hits, older-is-blind, commit to L1, permission fault, squash with a late reply, walk fault, store |
| `tb_safespec_top` | the whole design at default sizes (see below) |
| `tb_icache_spectre` | the instruction-cache Spectre variant: a wrong-path call into one of 256 targets 1 KB apart, then a probe of all 256; only a correct-path control target may be fast |
| `tb_tsa_attack` | the transient attack on the shadow d-cache at default size: a wrong path that fills 71 lines changes nothing the retiring path can time |
| `tb_tsa_sizing` | the same channel with a deliberately undersized 24-line shadow d-cache: the retiring spy's latency now reveals the bit (35 vs 152 cycles), which is why the default sizing is worst-case |

`tb_safespec_top` runs the design at its default sizes. It fills the shadow i-cache to
all 224 lines and the shadow d-cache to all 72 lines, and checks that neither ever
blocks. It then retires them six per cycle and checks the L1 hits that follow. It runs a
Spectre-v1 gadget and a Meltdown gadget and checks that probing the leaked lines
afterwards finds them in neither the L1 nor the shadow state. It also covers the
older-is-blind rule, a dropped late reply, walk faults and a store merge. It counts each
of these mechanisms and fails if any of them never happened. The next level and the page
walker are `tb_lower_model`: fixed-latency, in-order replies. Their data are pure
functions of the address, defined in `tb_safespec_pkg`, so every returned line is
checked without a copy of memory.

With plain Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/safespec_pkg.sv tb/tb_safespec_pkg.sv tb/tb_safespec_top.sv \
    --top-module tb_safespec_top
./obj_dir/Vtb_safespec_top
```

The same command, with `tb_safespec_top` replaced by another testbench's name, runs that
testbench. The full-size run builds in about 15 s and simulates in under a second.

## Where this RTL departs from, or goes beyond, the proposal

* The proposal describes the shadow structures, their sizing and the commit/squash rules
  at the level of behaviour. How entries are picked, the owner encoding, the pointer
  format, the drain rate, the filter size and all handshakes are this design's own.
* Only the wait-for-commit policy is built. Wait-for-branch, which the proposal rejects
  because it does not stop Meltdown, is not built.
* "Same execution branch" is implemented as "same instruction or younger", with owners
  identified by ROB index. The proposal suggests branch ids for its filter.
* The filter only discards replies. The variant the proposal mentions, where replies for
  already-committed work are written straight to the committed structures, has nothing
  to do under wait-for-commit: an access cannot retire before its reply arrives.
* The proposal puts the TLB pointers in the ROB. Here the i-cache and iTLB pointers are
  kept per ROB entry, but the dTLB pointer sits next to the d-cache pointer in the
  load-queue slot, because only loads allocate dTLB shadow entries.
* Each side serves one access at a time. The core's 6-wide issue is not modelled on the
  access ports; only retirement is 6-wide.
* The L1s use round-robin replacement and write-through, no-write-allocate stores. The
  TLBs are 4-way. None of these is specified by the proposal.
* Not included: the core pipeline (fetch, decode, issue, ROB, load/store queues), the
  branch predictor, the page walker and the L2/L3/DRAM. Their interfaces are ports of
  the top.
