# Hardware translation coherence for virtualized multiprocessors

This is SystemVerilog RTL for the hardware mechanism proposed in *Hardware
Translation Coherence for Virtualized Systems* (Yan, Cox, Veselý,
Bhattacharjee), known as HATRIC. It is an independent implementation built
from that description, not the authors' code.

## The problem

A hypervisor that moves a guest's page from one physical frame to another
(for example from off-chip DRAM into die-stacked DRAM) rewrites a *nested*
page table entry, which maps a guest physical page (GPP) to a system
physical page (SPP). Every CPU may still hold stale copies of that mapping:

* in its **TLBs**, which map guest virtual pages (GVP) straight to SPPs,
* in its **nTLB**, which caches GPP → SPP,
* in its **MMU cache**, which caches where in system memory the guest page
  table levels are.

Today, software keeps these structures coherent. It sends inter-processor
interrupts, forces VM exits, and flushes every structure on every CPU that
ever ran the VM. It cannot do better, because TLBs are tagged by GVP and
the hypervisor does not know the GVP.

## The idea: co-tags and the cache coherence protocol

Page table entries are ordinary memory, so the data caches already keep
them coherent. HATRIC extends this to the translation structures:

1. **Co-tags.** Each TLB, nTLB and MMU-cache entry gets a *co-tag*: part of
   the system physical address of the nested page table entry its
   translation came from. The page table walker knows that address during
   the walk and stores it when it fills the entry.
2. **Page-table bits in the directory.** Each directory entry gets two bits
   saying whether the line holds guest (gPT) or nested (nPT) page table
   entries. The walker's requests set them.
3. **Invalidations reach the translation structures.** When a CPU writes a
   line whose directory entry has a page-table bit set, the invalidations
   sent to the sharers are marked as page-table invalidations. Each target
   CPU compares the line address with the co-tags of all its translation
   entries and drops those that match. No interrupt, no VM exit, no flush.

To the protocol, the translation structures are read-only caches with two
states: valid (Shared) and invalid.

## Walk-through of one remap

This follows the four-CPU example used to explain the mechanism. The
system-level testbench replays it on the 32-CPU default configuration.

1. CPU 0 misses in its TLBs and walks the page tables. Its walker's read
   of the nested leaf entry misses in its L1 and goes to the directory as a
   read carrying the nPT kind. The directory allocates the entry (or finds
   it) and sets nPT. The line fills the L1, and the translation fills the
   TLB with a co-tag naming the entry's address.
2. CPU 3 caches two translations whose nested entries lie in the same
   64-byte line. CPU 1, running the hypervisor, reads the entry.
3. CPU 1 stores the new SPP into the nested entry. Its L1 sends GETM. The
   directory sees nPT and sends an invalidation with `pt = 1` to every
   other CPU listed as sharer.
4. CPU 0 drops its TLB entry and its L1 line. CPU 3 drops *both* TLB
   entries, because coherence works on whole lines. A CPU listed as sharer
   that holds nothing answers "no match" (a spurious message) and is
   removed from the sharer list.
5. The next translation on CPU 0 or CPU 3 walks again. It reads the new
   entry coherently: CPU 1's modified line is downgraded and its data
   forwarded. CPUs that never cached the translation are not disturbed.

## Co-tags in detail

A co-tag is bits 19:3 of the system physical address of the nested leaf
entry (nL1). This holds for every structure:

| structure | key | value | co-tag names the nested leaf entry that gave |
|---|---|---|---|
| L1 TLB, L2 TLB | GVP | SPP of the data page | the data page's SPP |
| nTLB | GPP | SPP | that SPP |
| MMU cache | level L and GVP bits 35:9(L-1) | SPP of the guest table at level L-1 | that table's SPP |

Coherence messages name 64-byte lines, and a line holds eight 8-byte
entries. So only co-tag bits 19:6 are compared with the line address, and
all translations from one line go together. The co-tag keeps only
address bits up to 19, so entries 1 MB apart in system memory alias. Such
an alias costs an extra invalidation, never a missed one.

The source gives the width two ways: "2-byte co-tags" and "bits 19-3" (17
bits). The RTL follows the bit range. `COTAG_MSB` and `COTAG_LSB` in
`hatric_pkg` set it.

Guest page table changes are not covered by these co-tags, because they
name nested entries only. The directory still records gPT lines, and their
invalidations reach the translation structures. But an entry matches only
if its co-tag happens to fall in the same line. The source says the
scheme applies to guest tables as well. But it defines co-tags only from
the nested leaf entry, and its evaluation covers nested-table remaps. This
design keeps that definition, so guest-table changes still need the
existing software shootdown.

## The two-dimensional walk

`mmu.sv` walks x86-64 style four-level guest and nested tables: 4 KB
pages, 9 index bits per level, entries with bit 0 present, bit 5 accessed
and bits 51:12 frame. Each guest table pointer (the guest CR3 first) is a
GPP. The walker first translates it through the nested table (nL4..nL1),
then reads the guest entry from the resulting SPP. A cold walk makes 5
nested walks of 4 reads plus 4 guest reads: 24 reads. The testbenches
check this count.

Shortcuts, in lookup order:

* L1 TLB, answered the cycle after the request;
* L2 TLB, one cycle later; a hit refills the L1 TLB;
* MMU cache, probed for levels 2, 3 and 4, one cycle each; the deepest hit
  gives the SPP of a guest table and the walk continues below it;
* nTLB, looked up before every nested walk.

When an entry's accessed bit is clear, the walker sends a *mark* request
through its L1 to the directory. The directory then sets the gPT/nPT bit
even if the line came into the L1 through an ordinary load. The walker
itself never writes page tables, so an entry whose accessed bit
software has not set is marked again on every walk through it.

A walk reads page table data that may change while it runs. If any
page-table invalidation reaches the MMU during a walk, the walk makes no
further fills and starts again once it finishes. So a translation built
from data read before the change is never installed. The same rule applies
in a single cycle inside `xlat_cache`: a fill whose co-tag matches an
invalidation in that cycle is dropped.

## The directory

`coh_directory.sv` is one bank's directory for a MESI protocol. Each entry
holds the line address, a sharer bit per CPU, an owner (a CPU in E or M),
and the gPT and nPT bits. Its sharer list is *pseudo-specific*: a listed
CPU may hold the line in its L1, translations from it, or both. So every
message goes to the L1 and, for page-table lines, to the translation
structures as well.

Rules that differ from a plain MESI directory:

* **Lazy eviction.** When an L1 evicts a page-table line (PUTS, or PUTM
  with data), the CPU stays in the sharer list. Its translation structures
  may still hold entries from that line. For ordinary lines the sharer is
  removed as usual.
* **Spurious demotion.** A snoop acknowledgement carries two bits: the L1
  held the line (`l1_hit`), and a translation entry matched
  (`xl_hit`). When both are clear the message was spurious: it is counted,
  and the CPU is removed from the sharer list.
* **Back-invalidation.** Evicting a directory entry invalidates the line
  in every sharer. For page-table lines `pt` is set, so translation
  structures are back-invalidated too.
* **Mark.** A MARK request sets the entry's page-table bits and lists the
  requester as sharer. If the line has no entry, one is allocated.

Each bank handles one transaction at a time. A transaction goes:
look up, optionally evict a victim with back-invalidation, send snoops
and collect every acknowledgement, write dirty data to memory, read
memory if needed, grant. Data comes from memory, or from the owner's
acknowledgement when the owner held it modified. The LLC data array is
not modelled; each bank's memory port stands for the LLC and DRAM behind
it. E is granted only when no other CPU is listed.

## Messages and interfaces

All shared types are in `rtl/hatric_pkg.sv`.

| channel | direction | payload | handshake |
|---|---|---|---|
| request | CPU → bank | `cpu_req_t`: GETS, GETM, PUTS, PUTM, MARK; line address; page-table kind; line data for PUTM | valid/ready; held until accepted |
| grant | bank → CPU | `dir_rsp_t`: S, E, M or ACK; line data | valid/ready |
| snoop | bank → CPU | `snoop_t`: INV or DOWN; line; `pt` flag | per-target valid/ready; an L1 accepts one per cycle |
| acknowledgement | CPU → bank | `snoop_ack_t`: `l1_hit`, `xl_hit`, `dirty`, data | one cycle after the snoop; always accepted |

`coh_network.sv` connects NCPU CPUs to NBANKS banks as a crossbar with no
added latency. Lines are interleaved across banks by their low address
bits. Each bank has a round-robin arbiter for requests. When several banks
snoop the same CPU, the lowest-numbered bank goes first.

## Modules

| file | what it is |
|---|---|
| `hatric_pkg.sv` | widths, message types, co-tag helpers |
| `xlat_cache.sv` | co-tagged set-associative translation structure (one design, four uses) |
| `mmu.sv` | L1 TLB, L2 TLB, nTLB, MMU cache and the two-dimensional walker |
| `l1_cache.sv` | private MESI L1 with two ports (core, walker) and the relay of page-table snoops to the MMU |
| `cpu_tile.sv` | one MMU and one L1 joined |
| `coh_directory.sv` | directory bank with page-table bits, lazy update, back-invalidation |
| `coh_network.sv` | CPU/bank crossbar |
| `hatric_top.sv` | NCPU tiles, the network, NBANKS directory banks |

The cores, L2 caches, LLC data arrays and DRAM are outside the top.
`hatric_top` brings out each CPU's translation port (GVP in; SPP, fault,
source and walk read count out) and load/store port (system physical
addresses, 64-bit words). It also brings out each bank's memory port
(64-byte lines) and four event counters: page-table snoops, spurious
acknowledgements, back-invalidations and lazy evictions.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NCPU` | 32 | evaluated system (one passage of the source describes 16) |
| `L1TLB_ENTRIES` / `L2TLB_ENTRIES` | 64 / 512 | evaluated system |
| `NTLB_ENTRIES` / `MMUC_ENTRIES` | 32 / 48 | evaluated system |
| `L1_BYTES` | 32768 | evaluated system |
| co-tag bits | 19:3 | source |
| `NBANKS` | 32 | own choice: one bank per CPU, as in the source's 4-CPU figure |
| `DIR_SETS` × `DIR_WAYS` | 256 × 8 per bank | own choice |
| TLB ways, L1 ways | 4, 8 | own choice; nTLB and MMU cache fully associative |

## Where this RTL departs from the source

* The source uses a dual-grain directory from earlier work and does not
  describe it. This directory tracks single lines.
* The 256 KB private L2 and the 20 MB shared LLC are not modelled. The L1
  talks to the directories directly, and directory banks read and write
  memory directly.
* The source describes demotion as a separate message from the CPU. Here
  it rides on the snoop acknowledgement.
* The source mentions superpages, VM and process identifiers, and MOESI
  or snooping variants. None is built: tags hold no address-space
  identifier, and the tests run one VM.
* The message encoding, the crossbar, all handshakes and latencies, the
  replacement policies, the walker's restart rule and the synchronous
  active-low reset are this design's own choices.
* The source's further proposals are not built. These are prefetching
  updated translations, and its comparison designs (eager directory
  update, fine-grained tracking, an infinite directory, and the UNITD++
  reverse-lookup design).

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_xlat_cache` | lookup, line-granular co-tag invalidation, aliasing, racing fill, replacement, flush |
| `tb_mmu` | 24-read cold walk, L1/L2 TLB hits and their latency, MMU-cache reuse (5 reads), marks, remap after invalidation, restart after an invalidation during a walk, faults |
| `tb_l1_cache` | misses, hits, silent E→M, relay of page-table invalidations with the co-tag bits, spurious acknowledgements, downgrade, upgrade, eviction, mark |
| `tb_coh_directory` | grants, pt-marked invalidations, lazy vs. eager eviction, spurious counting, mark, owner forwarding, PUTM write-back, back-invalidation |
| `tb_coh_network` | routing, round-robin, grant steering, snoop priority, acknowledgement steering |
| `tb_hatric_top` | the remap walk-through above on the full 32-CPU default configuration; counts every mechanism and fails if one never happens |

`tb_ptmem_pkg.sv` builds the guest and nested page tables the tests use
and holds the memory model.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/hatric_pkg.sv rtl/xlat_cache.sv rtl/mmu.sv rtl/l1_cache.sv rtl/cpu_tile.sv \
  rtl/coh_network.sv rtl/coh_directory.sv rtl/hatric_top.sv \
  tb/tb_ptmem_pkg.sv tb/tb_hatric_top.sv --top-module tb_hatric_top -o sim
./obj_dir/sim
```

The full-size top testbench takes about three minutes to build and well
under a second to run. The block testbenches need only the files their
block uses.

## How far to trust it

* The tests are directed scenarios, not random stress. They cover
  concurrent snoops only as they arise in those scenarios. The protocol is
  blocking per bank, and each L1 has one miss outstanding. That keeps the
  races few, but they have not been checked formally.
* Two cases are argued rather than tested: an eviction notice that arrives
  after the line was taken away (it is ignored), and a snoop crossing a
  pending upgrade (the L1 always installs the granted data).
* The page table walker follows x86-64 formats, but not every detail:
  there are no superpages and no permission bits. The walker does not
  write accessed or dirty bits, which real walkers (and the source) do.
  It only reports a clear accessed bit to the directory with a MARK.
