# Two-stage address translation and Sstc timers for a CVA6-class RISC-V core

When a RISC-V core runs a hypervisor under the H extension (v1.0), a guest
virtual address goes through two translations. The guest's own page tables
(the VS stage, Sv39, rooted at `vsatp`) turn it into a guest-physical
address. The hypervisor's tables (the G stage, Sv39x4, rooted at `hgatp`)
then turn that into a host-physical address. Every VS-stage page-table
pointer is itself a guest-physical address, so it must also pass through the
G stage before it can be read. A full walk for a 4 KiB page therefore takes
up to 15 memory reads instead of 3.

This RTL holds the parts of an in-order RV64 core (modelled on CVA6) that
the H extension adds or changes, sized for the design point the source work
selects as its best trade-off:

* **Combined L1 TLBs.** The instruction and data TLBs (vITLB and vDTLB) are
  fully associative with 16 entries. Each entry holds both stages of a
  translation.
* **Nested page-table walker (vPTW).** It walks both stages, and it keeps
  an 8-entry **G-stage TLB (GTLB)**. The GTLB remembers where the guest's
  page-table pages live in host memory. With it, a repeated 4 KiB walk takes
  6 reads instead of 15.
* **Optional L2 TLB.** A set-associative, SRAM-based second level, with one
  bank for 4 KiB pages and one for 2 MiB pages. It is looked up alongside the
  walker. It is off at the default design point and on by parameter.
* **Sstc timers.** The supervisor timer comparators `stimecmp` and
  `vstimecmp`, with `htimedelta` and the `menvcfg`/`henvcfg` STCE enables.
  A guest can then program its own timer without trapping to the hypervisor.
* **Hypervisor-instruction decoder.** It recognises HLV/HLVX/HSV, SFENCE.VMA
  and HFENCE.VVMA/GVMA and applies their illegal and virtual-instruction
  rules. It produces the `hyp_ld/st` flag, which travels with a hypervisor
  load/store to the MMU.

The rest of the core is not included: fetch, issue, execute, commit, the
full CSR file, the caches and the platform timer (CLINT). All of their
signals are ports of the top module `cva6_hyp_top`.

## Hierarchy

```
cva6_hyp_top
├── hyp_decoder  (decode stage: flags hypervisor loads/stores and fences)
├── hyp_decoder  (second copy at commit: turns a committed fence into a flush request)
├── sstc_timer   (stimecmp, vstimecmp, htimedelta, STCE bits, STIP/VSTIP)
└── nested_mmu   (translation and exception logic)
    ├── vtlb     vITLB ─┐
    ├── vtlb     vDTLB ─┴── plru_tree
    ├── vptw     nested walker
    │   └── gtlb ── plru_tree
    └── l2_tlb   (only with L2TLB_EN=1)
        ├── l2_tlb_bank (4 KiB) ── tlb_sram (tags), tlb_sram (data), plru_tree per set
        └── l2_tlb_bank (2 MiB) ── same
```

`hyp_pkg` holds the shared widths, structs and helper functions:

| Constant | Value | Meaning |
|---|---|---|
| XLEN | 64 | register width |
| PLEN | 56 | physical address width |
| GPLEN | 41 | guest-physical address width (Sv39x4) |
| ASID | 16 bits | address-space identifier |
| VMID | 14 bits | virtual-machine identifier |

The main types are:

* `pte_t`: a page-table entry.
* `tlb_entry_t`: one two-stage TLB entry.
* `flush_req_t`: a fence, with its type and its address, ASID and VMID filters.
* `satp_t` and `hgatp_t`: views of the translation CSRs.

## Translation context and the hypervisor load/store path

For each access, `nested_mmu` first picks the translation context: the
value of V, the privilege level, which root is used for the first stage
(`satp` or `vsatp`), whether the G stage is on (`hgatp.MODE`), and the ASID
and VMID tags.

* **Fetches** use the current privilege level and V.
* **Loads and stores** use the effective privilege (`ld_st_priv_lvl_i`,
  `ld_st_v_i`). That is where MPRV would apply; MPRV itself is handled
  outside this design.
* **HLV/HLVX/HSV** (`lsu_hyp_i`) always translate as V=1, at the privilege
  in `hstatus.SPVP`. This switches the access onto `vsatp` and `hgatp`
  while the hart stays in HS or U mode. This is the whole job of the
  `hyp_ld/st` signal.

An HLVX needs execute permission rather than read permission, and it does
not honour MXR.

The permission checks follow the privileged specification:

* R/W/X and U, with SUM and MXR at both stages (`vsstatus` bits for the
  VS stage).
* Every G-stage access is treated as a user access.
* The A and D bits are checked but never written. A clear A bit, or a clear
  D bit on a store, raises a fault. Software must set them.

VS- or S-stage faults raise page faults. G-stage faults raise guest-page
faults, with the guest-physical address shifted right by 2 in `tval2`, as
`htval`/`mtval2` define it.

### Ports and timing

The fetch port (`icache_*`) and the load/store port (`lsu_*`) behave the
same way:

* **Hit.** A request that hits its L1 TLB is answered in the same cycle
  (`*_resp_valid_o`, physical address, or an exception).
* **Miss.** The port stays silent while the requester holds the request.
  The walker, or the L2 TLB, refills the L1 TLB, and the retried lookup
  then hits.
* **Walk fault.** The fault is answered as an exception in the cycle after
  the walk ends.
* **Both miss.** If both sides miss, the instruction side is walked first.

## Two-stage L1 entries (vITLB, vDTLB)

An L1 entry stores the leaf PTE of each stage, that stage's page size (4
KiB, 2 MiB or 1 GiB), the ASID and the VMID. A lookup compares the virtual
page number at the *smaller* of the two sizes.

So a 4 KiB guest page mapped through a 2 MiB host page covers only 4 KiB
in the L1 TLB. Hugepages in the hypervisor's tables do not enlarge L1 reach
when the guest uses small pages. This cost of the combined-entry design is
what the L2 TLB is meant to offset.

The output address is built from both PTEs:

1. The VS-stage PTE and the page offset give the guest-physical address.
2. The G-stage PTE maps that address at its own size.

All entries are compared in the same cycle. Refills go to the first
invalid entry, or else to the tree-PLRU victim.

## The nested walker

`vptw` keeps the usual walk states: idle, start, memory request and memory
wait. Next to them it keeps one extra register, the *translation stage*:

* `S_STAGE`: reading a VS-stage (or host S-stage) PTE.
* `G_INTERMED`: translating the guest-physical address of the next VS-stage
  PTE through the G stage.
* `G_FINAL`: translating the guest-physical address that the VS-stage leaf
  produced, or the guest address itself when the VS stage is Bare.

When the G stage is Bare, the walk is a plain Sv39 walk. When the VS stage
is Bare and V=1, only the `G_FINAL` walk runs.

When the walk ends, `update_o` carries one combined entry to the L1 TLB
that missed. The entry holds both leaf PTEs, both sizes, the ASID and the
VMID.

For a 4 KiB guest page on 4 KiB host pages, the reads add up as follows:

| Situation | VS-stage reads | G reads for VS pointers | Final G reads | Total |
|---|---|---|---|---|
| Host or Bare G stage | 3 | 0 | 0 | 3 |
| Nested, GTLB cold | 3 | 3 × 3 | 3 | **15** |
| Nested, GTLB holds the three table pages | 3 | 0 | 3 | **6** |

The walker checks the following faults:

* invalid PTE;
* W set without R;
* a non-leaf PTE at level 0;
* a misaligned superpage;
* a guest-physical address wider than 41 bits;
* a G-stage leaf without U for the implicit reads.

A fence aborts a walk. If a PTE read is outstanding, it is drained first,
and no result is produced.

**Memory port.** There is one read at a time. `ptw_mem_req_o` stays high
until `ptw_mem_gnt_i`; the 64-bit PTE comes later with `ptw_mem_rvalid_i`.
Any latency is allowed.

### GTLB

The GTLB has these properties:

* It holds G-stage translations only, as guest-physical page → host-physical
  page, at 4 KiB, 2 MiB or 1 GiB.
* It is filled only by the `G_INTERMED` walks for VS-stage table pointers.
  The final G-stage walk is always done in full and does not fill it.
* It is fully associative and searched in the walker's start state in the
  same cycle. A hit skips the three G-stage reads.
* Replacement uses a tree PLRU, and the entries are flip-flops.
* Only HFENCE.GVMA flushes it, filtered by VMID and/or guest-physical
  address.

`GTLB_EN=0` removes the GTLB entirely.

## L2 TLB

`l2_tlb` is a private, unified (instruction and data) second level. It holds
the same combined entries as the L1 TLBs.

**Banks.** Each merged page size has its own bank (`l2_tlb_bank`), and each
bank has its own controller:

* The 4 KiB bank defaults to 128 entries, 4 ways, 32 sets.
* The 2 MiB bank defaults to 32 entries, 4 ways, 8 sets.
* Entries of 1 GiB merged size are not stored.

**Storage.** Tags and data are each kept in a single-port synchronous RAM
(`tlb_sram`) with one word per set and a write lane per way. These RAMs map
onto SRAM macros. Each set has its own tree-PLRU state.

**Controller.** The controller is a four-state machine:

| State | Action |
|---|---|
| FLUSH | Steps through every set and clears its tags. It runs after reset and after any fence, and takes ENTRIES/WAYS cycles. There is no ASID or VMID filtering. |
| IDLE | Waits for a lookup or a walker update and starts the SRAM read of that set. Updates go first. |
| READ | Compares the tags and reports hit or miss with the entry, then returns to IDLE. |
| UPDATE | Writes the entry into the way that already holds it, else an invalid way, else the PLRU victim. |

**Lookups.** On every L1 miss, the L2 lookup starts in the same cycle as
the walk:

* The answer comes in the cycle after the request is accepted (the SRAM
  read takes one cycle).
* If there is a hit, the walker drops its walk (after any outstanding PTE
  read) and passes the L2 entry to the L1 TLB instead.
* If both banks hit, the 4 KiB bank answers first.

**Refills.** Every completed walk also refills the bank of its merged size.
One update is buffered while a bank is busy. An update that arrives during
FLUSH is dropped.

The L2 TLB is not inclusive: an L1 entry can outlive its L2 copy.

## Fences

Fences are applied when they commit. The top decodes the committed
instruction and builds one flush request from it and its rs1/rs2 values.
rs1 = x0 means "all addresses" and rs2 = x0 means "all ASIDs" (or "all
VMIDs" for HFENCE.GVMA).

| Fence | vITLB and vDTLB | GTLB | L2 TLB |
|---|---|---|---|
| SFENCE.VMA with V=0 | host entries, by VA and ASID | kept | everything |
| SFENCE.VMA with V=1, or HFENCE.VVMA | guest entries of the current VMID, by guest VA and ASID | kept | everything |
| HFENCE.GVMA | guest entries, by VMID and guest-physical address (rs1 << 2) | by VMID and guest-physical address | everything |

Global PTEs survive fences that filter by ASID. A flush takes effect at the
next clock edge and wins over a refill in the same cycle.

## Sstc timers

`sstc_timer` compares the platform `time` with the comparators:

* STIP = `menvcfg.STCE && time >= stimecmp`
* VSTIP = `henvcfg.STCE && time + htimedelta >= vstimecmp`

Both are level outputs that go to the interrupt logic.

Access rules:

* **`stimecmp` from HS mode** raises illegal instruction when
  `mcounteren.TM=0` or `menvcfg.STCE=0`.
* **From VS mode** the same address reaches `vstimecmp`. It raises illegal
  instruction under the M-level conditions above, and virtual instruction
  when `hcounteren.TM=0` or `henvcfg.STCE=0`.
* **`vstimecmp`, `htimedelta` and `henvcfg`** raise virtual instruction from
  VS/VU and illegal instruction from U.
* **`menvcfg`** is M-only.
* **`henvcfg.STCE`** reads as zero while `menvcfg.STCE` is zero.

At reset the comparators are all ones, so no interrupt is pending; the
STCE bits and `htimedelta` are zero. The CSR port answers in the same
cycle. `SSTC_EN=0` removes the comparators and the STCE bits.

## Parameters and configurations

| Parameter (top and nested_mmu) | Default | Range explored in the source study |
|---|---|---|
| `ITLB_ENTRIES`, `DTLB_ENTRIES` | 16 | 16, 32, 64 |
| `GTLB_EN`, `GTLB_ENTRIES` | 1, 8 | off, 8, 16 |
| `L2TLB_EN` | 0 | off / on |
| `L2_EN_4K`, `L2_EN_2M` | 1, 1 | 4 KiB, 2 MiB, or both |
| `L2_ENTRIES_4K`, `L2_WAYS_4K` | 128, 4 | 128/256 entries, 4/8 ways |
| `L2_ENTRIES_2M`, `L2_WAYS_2M` | 32, 4 | 32/64 entries, 4/8 ways |
| `SSTC_EN` | 1 | on / off |

These ranges give 3 × 2 × 3 × 2 × 2 × 2 × 2 = 288 combinations, and each
one can be set through these parameters.

The defaults are the configuration the study rated best: Sstc with 16-entry
L1 TLBs and an 8-entry GTLB, without an L2 TLB. Its larger reference points
add a 4 KiB L2 bank, a 2 MiB L2 bank, or both. Use `L2TLB_EN=1` for those,
with `L2_EN_4K` or `L2_EN_2M` to pick the banks.

The TLB entry counts and the L2 way counts must be powers of two.

## Top-level interface

All ports of `cva6_hyp_top` are plain vectors.

| Group | Ports | Notes |
|---|---|---|
| CSR state | `priv_lvl_i` (0 U, 1 S, 3 M), `v_i`, `ld_st_priv_lvl_i`, `ld_st_v_i`, `satp_i`, `vsatp_i`, `hgatp_i`, `mxr_i`, `vmxr_i`, `sum_i`, `vsum_i`, `spvp_i`, `tvm_i`, `vtvm_i`, `hu_i`, `mcounteren_tm_i`, `hcounteren_tm_i` | satp layout: MODE[63:60], ASID[59:44], PPN[43:0]. hgatp layout: MODE[63:60], VMID[57:44], PPN[43:0]. |
| Timer | `time_i` | from the platform timer |
| Decode | `id_instr_i` → `id_hyp_ldst_o`, `id_hlvx_o`, `id_is_load_o`, `id_is_store_o`, `id_size_o`, `id_unsigned_o`, `id_fence_o`, `id_ex_illegal_o`, `id_ex_virtual_o` | combinational |
| Commit | `commit_valid_i`, `commit_instr_i`, `commit_rs1_i`, `commit_rs2_i` | A committed fence flushes the TLBs at the next edge; `flush_o` marks the cycle. |
| Sstc CSRs | `csr_valid_i`, `csr_addr_i`, `csr_we_i`, `csr_wdata_i` → `csr_hit_o`, `csr_rdata_o`, `csr_ex_illegal_o`, `csr_ex_virtual_o`; `stip_o`, `vstip_o`, `menvcfg_stce_o`, `henvcfg_stce_o`, `htimedelta_o` | |
| Fetch translation | `icache_req_i`, `icache_vaddr_i` → `icache_resp_valid_o`, `icache_paddr_o`, `icache_ex_*` | |
| Load/store translation | `lsu_req_i`, `lsu_vaddr_i`, `lsu_is_store_i`, `lsu_hyp_i`, `lsu_hlvx_i` → `lsu_resp_valid_o`, `lsu_paddr_o`, `lsu_ex_*` | |
| Walker memory | `ptw_mem_req_o`, `ptw_mem_addr_o`, `ptw_mem_gnt_i`, `ptw_mem_rvalid_i`, `ptw_mem_rdata_i` | |
| Events | `itlb_miss_o`, `dtlb_miss_o`, `gtlb_hit_o`, `gtlb_miss_o`, `l2_hit_o` | single-cycle pulses for performance counters |

The clock is `clk_i`. The reset `rst_ni` is asynchronous and active low.

## Simulation

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.
`tb_pt_mem` is a behavioural page-table memory with random grant and
response delays, shared by the walker-level benches.

With Verilator 5, put the package first:

```
verilator --binary -j 0 --top-module tb_cva6_hyp_top \
  rtl/hyp_pkg.sv $(ls rtl/*.sv | grep -v hyp_pkg) tb/tb_pt_mem.sv tb/tb_cva6_hyp_top.sv
obj_dir/Vtb_cva6_hyp_top
```

Every testbench builds the same way: swap the top name and the last file.
Add `tb/tb_pt_mem.sv` for `tb_vptw`, `tb_nested_mmu`, `tb_cva6_hyp_top` and
`tb_cva6_hyp_l2cfg`.

| Testbench | What it checks |
|---|---|
| `tb_plru_tree` | victim choice against a reference tree model |
| `tb_tlb_sram` | one-cycle read latency and per-lane writes |
| `tb_vtlb` | merged-size matching with every VS/G size pair, ASID/VMID/global tags, all flush filters, replacement |
| `tb_gtlb` | hits at all three sizes, VMID isolation, HFENCE.GVMA filters, PLRU eviction |
| `tb_vptw` | the 3-, 15- and 6-read walks, re-cold walks after HFENCE.GVMA and for another VMID, faults, Bare modes |
| `tb_l2_tlb_bank` | the reset flush length (one cycle per set), response one cycle after acceptance, hit/miss against a model, updates while busy |
| `tb_l2_tlb` | routing by merged size, both banks in parallel, full flush |
| `tb_hyp_decoder` | every encoding and privilege/TVM/VTVM/HU combination against the specification rules |
| `tb_sstc_timer` | interrupt thresholds, htimedelta, every CSR access rule |
| `tb_nested_mmu` | both ports, the read counts, faults with tval2, HLV/HLVX/HSV, and (with `L2TLB_EN=1`) L2 hits that replace a walk |
| `tb_cva6_hyp_top` | end to end at the default parameters (below) |
| `tb_cva6_hyp_l2cfg` | end to end in a chosen study configuration (localparams at its top: L1 entries, GTLB on/off, L2 banks); as written, both L2 banks. 40 guest pages through the vDTLB, nested walks of 6 reads (15 without GTLB), revisits answered by the L2 TLB instead of a walk (or walked again without it), a 2 MiB page in the 2 MiB bank, a fence emptying the L2 |

`tb_cva6_hyp_top` plays the rest of the core. It brings up a host, then a
guest running with two-stage translation, then hypervisor accesses to guest
memory through HLV, HLVX and HSV. It commits every kind of fence and lets
both timers fire.

It counts each mechanism and fails any that never happened:

* L1 misses, same-cycle hits and DTLB overflow;
* GTLB hits and misses;
* 15-read and 6-read walks;
* page, guest-page and instruction guest-page faults;
* illegal and virtual instruction;
* each fence kind;
* STIP and VSTIP;
* V switches.

The L2 TLB is off at the defaults, so its behaviour is covered by
`tb_nested_mmu` and, through the top, by `tb_cva6_hyp_l2cfg`.

## Departures and limits

Places where this RTL chooses, or differs from, the published description:

* **Sstc threshold.** The interrupt condition is `time >= comparator`, as
  the Sstc specification states. The description says the interrupt fires
  when time is *greater than* the comparator.
* **L1 TLB size.** One summary table lists 4 entries for the L1 TLBs,
  while the text and the configuration table say 16. This design uses 16.
* **`hvencfg`.** The description calls the register `hvencfg`; this design
  implements it under its specification name, `henvcfg`.
* **L2 TLB details.** These are choices of this design: updates dropped
  during a flush, no 1 GiB entries, no inclusion with L1, and the one-cycle
  lookup timing. The description gives the banks, the SRAM storage, PLRU,
  the four states and the full flush, but not these details.
* **Permission rules.** All permission and fault rules, including A/D
  handling, come from the RISC-V privileged specification. The description
  only claims compliance with it.
* **Walker memory port.** One outstanding read and a req/gnt/rvalid
  handshake were chosen here. In CVA6 this port is shared with the data
  cache.
* **Not included:** the core pipeline, the complete hypervisor CSR file
  (`hstatus`, `hgatp`, the VS CSRs, trap delegation and the `htval` and
  `htinst` registers, which receive this design's tval2 and cause outputs),
  the caches, and the CLINT. Their connections are top-level ports.
* **Not run here:** the benchmark programs used to evaluate the design
  (MiBench automotive and San Diego Vision under a Linux guest). They need
  the complete SoC.
