# Oreo address path: masked addresses for ASLR-safe microarchitecture

Address space layout randomization (ASLR) hides where code and data sit by
adding a secret random offset to their virtual addresses. Timing attacks
get around it. A speculative or suppressed-fault probe of an address leaves
different traces depending on whether the address is mapped: a TLB fill, a
cache line, a BTB entry. An attacker who can tell "mapped" from "unmapped"
can read the offset in a few hundred probes. Secret-bearing addresses that
the victim uses in normal operation also index TLBs, caches and predictors,
so the offset leaks there too.

The design here removes the secret from every structure an attacker can
time. A few chosen bits of the virtual address are declared **protected
bits**. Before an address touches any microarchitectural structure, those
bits are cleared. The result is called the **masked address**. Every
virtual address that differs only in its protected bits becomes the same
masked address. It then takes the same TLB entry, the same page walk and
the same physical address. A probe with the wrong bits therefore behaves,
cycle for cycle, exactly like a probe with the right bits.

Whether the bits were right is decided only when the instruction
**commits**. The correct protected bits (the *offset*) are stored in the
leaf page-table entry. They travel with the translation through the TLB
and are kept in the ROB and LSQ. The commit stage compares them with the
bits the program actually used and raises an exception on a mismatch. A
probe that never commits, because a misprediction squashes it, learns
nothing.

This repository holds synthesizable SystemVerilog for the parts of an
out-of-order core that change under this scheme:

- the region table;
- the address converters;
- the fetch PC with its redirect path;
- instruction and data TLBs that carry the offset;
- an x86-64 page-table walker that reads the offset from leaf PTEs;
- a ROB and an LSQ extended with the offset and the precomputed check;
- the commit stage with its architectural PC and the two checks.

The branch predictor, caches, execution units and main memory are ordinary
and stay outside the top module as ports.

## 1. Address arithmetic

### Regions

A **randomization region** `[start, end)` is described by three 64-bit
words: start, end (exclusive), and a vector marking the protected bits
(`region_t` in `oreo_pkg`). Two regions are configured. Each takes 192 bits
of state, 384 bits in all, held in `oreo_region_table`. One table is shared
by every converter in the core.

| region | range | protected bits | offset width |
|---|---|---|---|
| kernel text and modules | `0xffffff8000000000` – `0xffffffef00000000` (444 GiB) | 31..38 | 8 |
| user space | `0` – `2^53` | 48..52 (non-canonical) | 5 |

### Virt2Mask (`oreo_virt2mask`)

Virt2Mask compares the address with the bounds of every region in
parallel. It takes the first region that matches and clears that region's
protected bits with an AND. It outputs:

- the masked address;
- a hit flag;
- the protected-bit vector it used, which is 0 outside all regions.

The logic is pure combinational and has no pipeline stage.

The defining formula for the masked address is
`w = ((v − start) mod 2^k) + start`, where `2^k` is the subregion size.
Clearing bits equals that formula only under two conditions:

1. the protected bits are the ones just above bit `k`;
2. `start` has those bits clear.

Both hold for the two regions above. Whoever programs the table must keep
them true. The hardware does not check them.

### Extract Bits (`oreo_extract_bits`)

Extract Bits gathers the bits selected by the vector into a dense 8-bit
field, lowest selected bit first. It is a parallel bit-extract. For the
kernel region, field bit 0 is address bit 31. For user space, it is bit
48. This packed field is the form the offset takes everywhere:

- in the PTE;
- in the TLB, ROB and LSQ;
- in both commit-time compares.

Only the first 8 selected bits are kept.

### Mask2Valid (`oreo_mask2valid`)

Mask2Valid is the inverse of the two units above. It deposits the packed
offset back into the protected positions and ORs the result into the
masked address, which gives the valid virtual address. The commit stage
uses it only to cross-check its own compare with an assertion. The check
itself is Extract Bits followed by an equality test.

## 2. Where the offset lives

The page tables map **masked** addresses. All the virtual addresses of a
page share one set of PTEs, so the walk never depends on the secret. The
offset is carried in otherwise unused bits of the leaf PTE:

```
63   62..59  58..51        50..46  45..12    11..8  7   6..3  2  1  0
NX   0       offset[7:0]   0       PPN       -      PS  -     U  W  P
```

User leaf PTEs have only 5 free bits outside the protection-key field, so
user offsets use field bits 0..4.

`oreo_ptw` is a four-level x86-64 walker:

- It walks the masked address from `cr3`.
- It ANDs the W and U permissions and ORs NX down the levels.
- It stops at a 2 MiB leaf (PS set at level 2) or a 4 KiB leaf.
- It returns the PPN, permissions, page size and offset.
- A missing level, or a 1 GiB leaf (not supported), gives a page fault.

Each level is one memory request and one response. With the one-cycle
memory of the testbenches, a 4 KiB walk takes 8 cycles.

`oreo_tlb` is fully associative. It is indexed by the masked page number,
and each entry holds 8 extra bits for the offset. A lookup is
combinational: hit, physical address, offset and a permission-fault flag
come out in the same cycle. The fault flag is the usual check, applied to
the masked translation. A fill replaces entries round-robin. 4 KiB and
2 MiB entries coexist.

Because the offset sits in every leaf PTE, each page may have its own
offset. Page-granularity randomization needs no hardware change.

## 3. The pipeline, stage by stage

### Fetch (`oreo_fetch_pc`)

The fetch PC is always a masked address. The next PC comes from one of four
sources:

| priority | source | masked? |
|---|---|---|
| 1 | execute redirect (indirect-branch target, misprediction recovery) | passes through a Virt2Mask |
| 2 | decode: PC + immediate of a direct branch | computed from the masked PC, so already masked |
| 3 | predictor target | predictor trained on masked PCs |
| 4 | PC + instruction size | already masked |

Only the execute redirect can bring a real virtual address into fetch.
That is the one place where a converter is needed. The core also sends
exception entry (`trap_vec`) through it. A stall input holds the PC. The
I-TLB is looked up with the masked PC, and its offset output is what the
front end dispatches with each instruction.

### ROB (`oreo_rob`)

The ROB is a circular buffer of 192 entries: one dispatch and one commit
per cycle. Besides completion state, each entry holds:

- the 8-bit offset of its PC;
- what the commit stage needs to recompute the next architectural PC: the
  kind (sequential, direct, indirect), size, immediate, taken flag and
  resolved target.

Squash keeps entries up to and including a given index. Flush empties the
buffer.

### LSQ (`oreo_lsq`)

The LSQ is one 64-entry queue, for the 32 load and 32 store slots of the
evaluated configuration. When a load or store presents its virtual
address, the LSQ does the following:

1. Its own Virt2Mask converts the address. The masked address goes to the
   D-TLB.
2. Extract Bits pulls the protected bits out of the virtual address.
3. The D-TLB answers in the same cycle. The LSQ then writes the entry in
   one go: masked address, extracted bits, the translation-fault flag, and
   one check bit (`extracted == offset from TLB`).
4. On a D-TLB miss the request is refused (`ad_accept` low) until the
   walker has filled the TLB.

The dependence search compares **masked** addresses at 8-byte granularity.
It returns the youngest older store to the same word (`fwd_hit`,
`fwd_idx`). Store data and the forwarding datapath belong to the baseline
core and are not modelled.

The check bit feeds nothing but commit. It changes no state that could be
timed.

### Commit (`oreo_commit`)

**ArchPC** is the true virtual PC of the ROB head. After each commit it is
recomputed by a copy of the next-PC logic:

- ArchPC + size;
- ArchPC + immediate, for a taken direct branch;
- the target forwarded from execute.

For the head instruction, the commit stage checks in this order:

1. **Baseline exceptions first**: an exception reported by execute, or a
   translation fault of the load/store. If protected-bit failures could
   pre-empt ordinary faults, a replay attack could tell the two apart.
2. **PC check**: Virt2Mask finds ArchPC's region, Extract Bits packs its
   protected bits, and they must equal the offset stored in the ROB entry.
3. **Load/store check**: the check bit from the LSQ head must be 1.

On any exception, `exc_valid` and `flush` rise for one cycle. The
exception reports its cause and the faulting ArchPC. ArchPC then loads
`trap_vec`, and the ROB and LSQ are emptied. Otherwise the head retires.
An assertion checks that every PC the packed-bit compare accepts
satisfies the formula `ArchPC == Mask2Valid(masked ArchPC, offset)`. The
compare is the stricter of the two. An offset with bits set beyond the
region's protected bits, which only a malformed PTE can produce, fails the
compare. The formula would silently drop those bits.

## 4. Putting it together (`oreo_core`)

`oreo_core` wires the blocks as the paper's microarchitecture figure shows:

1. masking on the redirect path into fetch and in the LSQ;
2. the offset flowing from page table to TLB to ROB and LSQ;
3. the checks at commit.

Both TLBs share one walker. The data side goes first when both miss, and a
register remembers which TLB the walk will fill. A walk that ends in a
page fault leaves a record of the faulting page. The requester then sees
the fault (`if_fault`, or `ad_fault` on an accepted address) instead of
waiting forever. The record is cleared when the requester moves on.

A misprediction (`ex_redirect`) squashes the ROB after
`ex_squash_rob_idx` and the LSQ after `ex_squash_lsq_tail`, and redirects
fetch. An exception at commit overrides a redirect in the same cycle.

### Interface

Every port is a plain signal or a struct from `oreo_pkg`.

| group | ports |
|---|---|
| configuration | `cfg_we/idx/data` (region table), `cr3`, `user_mode`, `trap_vec`, `tlb_flush` |
| fetch | in: `if_size` (0 holds, n advances), `bp_*`, `dec_*`; out: `if_pc`, `if_valid`, `if_stall`, `if_fault`, `if_pa`, `if_off` |
| dispatch | `disp_*` in, `disp_ready/rob_idx/lsq_idx` out |
| memory operations | `ad_valid/idx/va` in; `ad_accept/fault/wa/pa`, `fwd_hit/idx` out |
| completion | `cmp_*` (by ROB index), `ex_redirect/target/squash_*` |
| commit | `commit_valid`, `archpc`, `exc_valid/cause/pc` out |
| page-table memory | `mem_req_valid/ready/addr` out/in, `mem_resp_valid/data` in (responses in order) |

### Default parameters

| parameter | default | basis |
|---|---|---|
| `N` (regions) | 2 | the prototype's kernel and user regions |
| offset width | 8 | 8 extra bits per TLB entry and per ROB/LSQ entry |
| `ROB_DEPTH` | 192 | evaluated core |
| `LSQ_DEPTH` | 64 | evaluated core: 32 load + 32 store entries, unified here |
| `ITLB_ENTRIES`, `DTLB_ENTRIES` | 64 | not given; a common size |
| physical address | 46 bits | not given |
| `RESET_PC` | 0 | not given |

## 5. Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and each has a cycle watchdog.

| testbench | what it establishes |
|---|---|
| `tb_oreo_virt2mask`, `tb_oreo_extract_bits`, `tb_oreo_mask2valid` | random and corner addresses against independent loop models of the arithmetic, including the region formula and round trips |
| `tb_oreo_region_table` | writes, reset, independence of entries |
| `tb_oreo_tlb` | hits and misses on masked addresses, 2 MiB vs 4 KiB, permissions, round-robin eviction, flush |
| `tb_oreo_ptw` | 4 KiB and 2 MiB walks against a behavioural page-table memory, offset extraction, permission combining, faults, 8-cycle walk latency |
| `tb_oreo_fetch_pc` | source priority and the mask on execute redirects |
| `tb_oreo_rob` | ordering, completion, squash, flush, full/empty at 192 entries |
| `tb_oreo_lsq` | masking and extraction at insertion, precomputed check, masked dependence search, squash, then randomized rounds up to a full queue against a reference model |
| `tb_oreo_commit` | ArchPC next-PC sources, both checks, exception priority, trap entry, then 400 random heads against a reference model |
| `tb_oreo_core` | end-to-end program at full default size (below) |
| `tb_oreo_aslr_probe` | the security experiments (below) |

### End-to-end program

`tb_oreo_core` runs a short scripted program through the whole core. It
drives the front end and execution units itself and serves page tables
from a one-cycle memory. The program covers:

- a boot jump into kernel text;
- a store and a load to the same word in flight;
- a load with wrong protected bits under a mispredicted branch, which gets
  the valid physical address and is squashed silently;
- a committed load with wrong bits, which raises the load/store check;
- a jump to a PC with wrong bits, which raises the PC check;
- the same jump with a baseline exception, which the baseline exception
  wins;
- a walk to an unmapped page, which faults;
- a return to user space.

It counts each mechanism: commits, each exception kind, I-TLB and D-TLB
miss stalls, walks, walk faults, 2 MiB walks, squashes, store/load
matches, masked redirects and identical translations for wrong bits. A
mechanism that never happened counts as a failure.

### Security experiments

`tb_oreo_aslr_probe` reproduces three published security experiments at full
size, plus a check of per-page offsets:

- **Prefetch scan.** A user program scans the kernel region with a 2 GiB
  stride, 222 probes. Each probe issues the same load twice under a branch
  that later squashes both, and times the second one. All 444
  translations after the first hit in zero cycles and return the same
  physical address and permission result. The whole scan needs one page
  walk.
- **Transient jump.** A transient jump to a kernel function pointer is run
  twice from reset: once with correct protected bits, once with wrong
  ones. The per-cycle trace of every TLB input, the fetch physical
  address and the walker's memory requests is bit-identical between the
  two runs.
- **System call.** A system call is run from reset with two different
  kernel offsets. The traces are again identical, although ArchPC differs.

- **Per-page offsets.** Two kernel data pages carry different offsets.
  Each page commits with its own bits. A load that uses the first page's
  bits on the second page gets the same translation, then fails the check
  at commit.

A monitor also checks every cycle that no address reaching a TLB or the
walker carries a protected bit.

### Running a testbench

With plain Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/oreo_pkg.sv tb/tb_oreo_core.sv --top-module tb_oreo_core
./obj_dir/Vtb_oreo_core
```

Replace the testbench name for any other block. The simulator is
two-state, so every register that is read is reset. All testbenches run in
well under a second. `tb_oreo_core` and `tb_oreo_aslr_probe` use the top
at its default parameters. Only `tb_oreo_tlb` shrinks its block, to 4
entries, to make eviction quick.

## 6. Fidelity and departures

These follow the published design directly:

- the masked address space;
- Virt2Mask as parallel compare plus AND;
- the offset in unused leaf-PTE bits and 8 extra bits per TLB entry;
- masking on the execute-to-fetch redirect only;
- the offset field in each ROB entry;
- masking, extraction and a stored check bit at LSQ insertion;
- dependence checks on masked addresses;
- ArchPC with replicated next-PC logic;
- baseline exceptions before the protected-bit checks;
- the region sizes, protected bits, ROB and LSQ sizes, and the
  384-bit region state.

These are choices of this implementation:

- **PTE layout**: offset in bits 58..51, 46-bit physical addresses.
- **Extract Bits** packs the selected bits low-first. The published design
  names the unit but does not describe it.
- **Overlapping regions**: the lowest-index region wins.
- **Widths**: commit and dispatch width 1. The evaluated core is 8-issue,
  and a wider commit would replicate the check per slot.
- **LSQ**: one unified queue instead of separate load and store queues.
  Dependence search is at 8-byte words.
- **TLBs**: size, full associativity and round-robin replacement. No
  second-level TLB and no page-walk cache.
- **Walker**: one walker shared by both TLBs, data side first, no
  accessed/dirty-bit updates, no 1 GiB pages.
- **Exceptions**: order of the PC check before the load/store check.
  Exception entry via `trap_vec`.
- **Next-PC operands**: kept in the ROB entry.

Not modelled, because they are baseline parts:

- the branch predictor and BTB;
- L1/L2 caches;
- store data and forwarding;
- execution units;
- the operating-system changes that build masked page tables.

Those software changes are a precondition for correct operation. Page
tables must map masked addresses, and each leaf PTE must carry the offset
of its page.

Lint notes: Verilator reports some unused signals:

- package constants not used by every module;
- page-offset bits of page-number inputs;
- the region-hit flags where only the mask is needed.

It also reports a few output pins left open on purpose (occupancy counts,
the fetch unit's region flag). None is a circuit fault. Each is explained
in the opening comment of the module concerned.
