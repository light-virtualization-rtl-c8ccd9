# LightV: page virtualization by answering the MMU's snoops

Conventional memory virtualization adds a second translation stage with its
own page tables and a hypervisor to manage them. It is all or nothing: once
the hypervisor runs, every guest page goes through it. LightV ("Light
Virtualization") takes another route. It redirects chosen virtual pages of a
running process to other physical frames without changing a byte of the page
tables in memory and without running code on the CPU.

The trick is coherence. On a cluster whose caches are kept coherent by
snooping (ARM ACE here), an MMU page-table walk that misses in the CPU caches
makes the interconnect snoop every other coherent agent for the line that
holds the page-table entry (PTE). LightV is such an agent, built in
programmable logic. When the snooped line lies on the translation path of a
target page, LightV answers "I have it". It reads the real line from DRAM,
rewrites the entries that matter, and hands the rewritten line to the
interconnect. The MMU believes what it gets. Every other snoop is declined
at once, so the rest of the address space is walked exactly as before.

This repository holds synthesizable SystemVerilog for the LightV module itself
and testbenches that play the CPU, the interconnect and DRAM around it.

## The translation path being steered

The design assumes the AArch64 format of a 39-bit virtual address with 4 KB
pages, where the fourth translation level is folded away:

| VA bits | 38..30  | 29..21  | 20..12  | 11..0  |
|---------|---------|---------|---------|--------|
| use     | index 0 | index 1 | index 2 | offset |

A walk reads entry `index 0` of the page global directory (PGD). That entry
points to a level-1 table; its entry `index 1` points to a level-2 table;
that table's entry `index 2` is the page descriptor giving the physical
frame. Each entry is 64 bits, so a 64-byte cache line holds eight of them. A
snoop names only the line, not which of the eight entries the MMU wants.

## What happens to one snoop

```
 CCI --AC--> coherence interface --line--> path checker (+ context cache)
                 |  ^                             |
  CR (hit/miss) <-  |  match? level, real line, entries + targets
                    |
                    +--request--> DRAM interface --AXI AR/R--> DRAM
                    |                   |
  CD (4 beats) <----+-- PTE manipulator <-- line
```

1. The snoop address (AC channel) is latched. One cycle later the path checker
   says whether the line is on a target's path.
2. **No match.** CR is answered with DataTransfer = 0, two cycles after the
   snoop was accepted. The interconnect fetches the line from DRAM itself.
   This is the only cost LightV adds to untouched translations.
3. **Match.** CR is answered with DataTransfer = 1 ("hit"), and the DRAM
   interface reads the real line at the same time (one AXI INCR burst of four
   128-bit beats). The PTE manipulator rewrites the entries of the line that
   lie on a target's path, if there are any. The line then goes out on CD in four beats. With no
   back-pressure, a claimed snoop takes 13 cycles from snoop issue to the
   last data beat, and a declined one takes 3.

Only one snoop is handled at a time. Only read snoops (ACSNOOP 0000 to 0011)
can be claimed. Cache-maintenance and invalidating snoops are always declined.

## Watermarks and the context cache

This is the part of the design that needs the most explanation.

**Why the walk must stay observable.** Take the obvious scheme: rewrite only
the last-level descriptor, and recognize the level-1 and level-2 tables by
their real addresses. It works only while the CPU never caches page-table
entries. Once it does, a later walk may start from a cached upper-level
entry. LightV then sees a snoop of some level-2 table line with no idea which
walk it belongs to.

**What LightV serves instead.** In every table entry it serves on a target's
path, LightV replaces the next-table address with a *watermark*. A watermark
is a page frame number inside a region that is not backed by memory:

```
 watermark PFN [27:0] = { WM_BASE[27:10], owner[7:0], level[1:0] }
```

Here `level` is the level of the table the entry now points to (1 or 2).
`owner` is a target number that stands for that table. The real next-table
frame read from DRAM is stored in the **context cache**, one entry per
(owner, level). It does not matter whether the MMU's next read comes straight
from the walk or later from an entry it cached. Either way it targets a
watermark page. The path checker decodes owner and level from the address,
finds the real table frame in the context cache, and has the DRAM interface
read the same line of the real table.

**Targets that share tables.** Two target pages may sit under the same
level-1 or level-2 table, or even in the same line of entries. A table then
has to be named the same way whichever target's walk reaches it, or the
context would be stored twice and the MMU would see two aliases of one table.
The rule is simple: a table is owned by the lowest-numbered enabled target
whose path runs through it. Its watermark carries that owner's number, and
its real frame is stored under that owner. A watermark hit therefore stands
for all enabled targets with the same upper indices as the owner. Disabling
the owner is a register write, so it empties the context cache. The next
walk then names the next target in line as the owner.

**Which entries of a line to rewrite.** For the PGD, the checker matches
each line that holds `PGD + 8 × index0` of some enabled target. For a
watermarked table, every line of it is claimed, because the real table
behind it is reachable only through LightV. In the claimed line, the checker
marks every entry that lies on the path of an enabled target using that
table. An entry's line is given by the upper six bits of the target's index
at that level, and its position in the line by the lower three bits. Each
marked entry also carries the number of the lowest such target. For a table
entry, that number is exactly the owner of the next table. For a leaf, it
selects the destination. Several entries of one line may be rewritten in the
same pass. All other entries pass through unchanged, so neighbours in the
same line translate normally.

**The leaf.** At level 2 the target's page descriptor is replaced by one
built from the destination frame and an attribute template, both programmed
by software. Bits [63:52] and [11:2] come from the template and bits [1:0]
are 11. An entry that is invalid in memory (bits [1:0] ≠ 11) is never
rewritten. The CPU faults on it as it would without LightV.

**Invalidation.** Any register write empties the context cache. After that,
a snoop of an old watermark is declined. The CPU must then walk from the PGD
again, for example after a TLB and cache flush of the old entries. The
hardware does not force that flush.

## Module map

| file | role |
|------|------|
| `rtl/lightv_pkg.sv` | widths, descriptor helpers, watermark layout, ACE/AXI channel structs |
| `rtl/lightv_top.sv` | the LightV module; wires the blocks below |
| `rtl/lightv_cfg_regs.sv` | software-visible registers |
| `rtl/lightv_coh_if.sv` | ACE snoop slave (AC in, CR and CD out); sequences a snoop |
| `rtl/lightv_path_checker.sv` | match on PGD line or watermark, marks the entries to rewrite; contains the context cache |
| `rtl/lightv_ctx_cache.sv` | real table frame per (owner target, level) |
| `rtl/lightv_dram_if.sv` | AXI4 read master, one 64-byte line per request |
| `rtl/lightv_pte_manip.sv` | combinational rewrite of the marked entries and context-cache writes |

The top's ports are plain signals and packed structs. The ACE snoop channels
are `ac_valid/ac_ready/ac`, `cr_valid/cr_ready/cr` and `cd_valid/cd_ready/cd`.
The AXI read channels are `ar_valid/ar_ready/ar` and `r_valid/r_ready/r`. The
top also has a register port (`cfg_*`) and three one-cycle event strobes:
`evt_hit`, `evt_miss` and `evt_rewrite`. Reset is asynchronous and active low.
The module comes out of reset disabled, with the context cache empty.

## Registers

64-bit registers, addressed by word (`cfg_addr`). A write takes effect on the
next clock edge and clears the context cache.

| address | name | content |
|---------|------|---------|
| 0 | CTRL | bit 0: enable |
| 1 | PGD | physical address of the process's PGD |
| 2 | WM_BASE | base of the watermark region; bits 21..0 ignored (4 MB aligned) |
| 4+4t | T_VA | virtual address of target t |
| 5+4t | T_PA | destination physical address of target t |
| 6+4t | T_ATTR | descriptor template of target t (bits 63..52, 11..2 used) |
| 7+4t | T_EN | bit 0: target t enabled |

Enabled with no target, LightV is *passive*: it is snooped but claims
nothing. This is the configuration in which the cost of merely being a
coherent agent can be measured.

## Parameters and fixed sizes

| name | default | origin |
|------|---------|--------|
| `NUM_TARGETS` (top and blocks) | 1 | a single virtualized page, as in the evaluated prototype; up to 63 (register map) |
| VA width, levels, index width, page size | 39, 3, 9, 4 KB | AArch64 4 KB granule with the fourth level folded |
| PA width | 40 | design choice |
| cache line, PTEs per line | 64 B, 8 | design choice (Cortex-A53 line size) |
| ACE CD / AXI data width | 128 | design choice |
| target field in watermark | 8 bits | design choice |

## What the hardware relies on

- The MMU's PTE reads are cacheable and reach LightV as snoops whenever they
  miss in the CPU caches.
- The PGD of the process is known and programmed before enabling.
- Each target page's tables are pre-populated. Pages that are not targets
  may share tables and lines with targets. They translate normally, since
  their entries are served unchanged. The concept asks for an isolated
  target range (no other valid page under the same index-0 entry). Its
  reason is demand paging: a fault on a neighbour would make the kernel
  read a watermark as a table address. That is a software-level
  precondition, which this RTL neither checks nor needs for its own
  operation.
- Two targets with the same virtual page both go to the destination of the
  lower-numbered one.
- No memory or device sits in the watermark region. The CPU never writes to
  page tables reached through a watermark while LightV is active.
- CPU-side page-table updates for a target (for example by the kernel's
  demand paging) are not followed. Such a change needs a new configuration
  write and a flush.

## How this RTL relates to the published concept

The concept defines the four blocks, their order of operation (check, ACK or
NACK, fetch from memory while the interconnect waits, manipulate, serve), the
PGD-plus-offset first check, the watermark carrying the translation step, the
context cache inside the path checker, the single-page redirect of the
prototype, and passive operation. Everything below the level of those
statements is this design's own:

- the ACE and AXI signal-level behaviour and the CRRESP bits used;
- the watermark bit layout and the choice to watermark every table level;
- the owner rule for tables shared by several targets;
- the context-cache organisation;
- the register map and the clearing of the context on each write;
- the rule that only valid entries are rewritten;
- serving a line unaltered after an AXI read error;
- all cycle timings.

The concept also sketches extensions that are not built here: following
kernel-side page faults, IPA-to-PA (hypervisor stage-2) steering, seamless
page migration with TLB invalidation issued by the module, I/O device
sharing, and instruction or interrupt virtualization. The concept's other
rewrite policies ("arbitrary logic") are not built either. Only the page
redirect exists, for one target page by default or for several.

## Verification

Every testbench is self-checking. It prints `TB_RESULT checks=N failures=M`,
and a watchdog ends it if it hangs.

| testbench | what it establishes |
|-----------|--------------------|
| `tb_lightv_cfg_regs` | register decode, read-back, context-clear pulse, reset |
| `tb_lightv_ctx_cache` | random writes, lookups and clears against a reference array |
| `tb_lightv_path_checker` | PGD and watermark matching, real line address, marked entries and their targets (also with targets sharing tables), against a reference computed from entry addresses |
| `tb_lightv_pte_manip` | rewrite of one or several entries at every level, owner in watermarks, untouched neighbours, invalid entries, context writes |
| `tb_lightv_dram_if` | AXI burst fields, data, error flag, 6-cycle latency without stalls |
| `tb_lightv_coh_if` | CR/CD protocol under back-pressure, 2-cycle response, one DRAM read per claim |
| `tb_lightv_top` | end to end at default size. A walker and interconnect model walk a target and two neighbours with LightV off, passive and active, with and without cached entries. It checks every served line entry by entry and counts each mechanism: declined and claimed snoops, rewrite, watermark lookup, walk resumed from cached watermarked entries, claimed line whose walked entry is untouched, non-read snoop declined, passive mode, and context dropped on reconfiguration. |
| `tb_lightv_multi` | end to end with four targets that share a PGD line, a level-1 table and a leaf line, plus untargeted neighbours in the same tables. It checks every served line against a reference built from the configuration and every walk's physical address, with and without cached entries. It also disables the owner target and checks that ownership passes on. |
| `tb_lightv_histogram` | translation traffic of an RGB-histogram run: 13575 image pages, 16 code pages and one hot page. It runs passive, then active, then active with CPU-side PTE caching, and checks every translation. |

The histogram run confirms the key property. With one page virtualized, the
only snoops LightV claims are those of that page's walks: 3 per walk, or 1
per walk once the CPU caches the watermarked upper entries. Every other snoop
is declined in a constant 3 cycles. The wall-clock overheads measured on
silicon cannot be derived from RTL simulation.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/lightv_pkg.sv tb/tb_lightv_top.sv --top-module tb_lightv_top -o sim
./obj_dir/sim
```

Replace `tb_lightv_top` with any testbench name. Lint a module with
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/lightv_pkg.sv rtl/<module>.sv`.
The remaining lint warnings concern unused package constants and unused bits
of wide fields.
