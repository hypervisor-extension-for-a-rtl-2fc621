# RISC-V Hypervisor Extension: privilege modes, CSRs, trap delegation and two-stage MMU

A virtual machine's guest kernel expects to own the machine: its own supervisor
registers, its own trap handlers and its own page tables. The RISC-V hypervisor
extension lets a 64-bit core give it that in hardware, instead of having a
software monitor trap and emulate every privileged action. This RTL holds the
parts of a core that change for this:

- **Privilege modes.** A virtualization bit V sits next to the M/S/U level.
  With V=1 the core runs in VS (the guest kernel) or VU (guest user code).
  S with V=0 becomes HS, where the hypervisor runs.
- **CSRs.** The hypervisor gets its own registers: `hstatus`, `hedeleg`,
  `hideleg`, `hgatp`, `htval` and the rest. The guest gets a VS copy of every
  supervisor register it uses, and the guest's accesses to the S-level CSR
  addresses land in those copies without the guest knowing.
- **Trap delegation over three levels.** A trap can be handled in M, HS or VS.
- **Two-stage address translation.** A guest virtual address (GVA) goes
  through the guest's page table to a guest-physical address (GPA). The GPA
  then goes through the hypervisor's table to a host-physical address (HPA).
  The page-table walker and the TLB both have to handle this.

It is based on the description of such an extension for the Lagarto core
(Gauchola et al., "Hypervisor Extension for a RISC-V Processor", DRAC project).
That description names these parts and gives the Sv39 geometry, but not the
parts' insides. Where it stops, this design follows the RISC-V privileged and
hypervisor specifications, or makes a simple choice of its own. The section
"What comes from where" lists which is which.

The core itself is not included: no pipeline, decoder, caches or interrupt
controller. The top module `hyp_ext_top` exposes ports for that core. The core
presents CSR instructions, traps, MRET/SRET, fences and address translations
on them. The walker reads page tables through a memory read port.

```
                 +--------------------------- hyp_ext_top ---------------------------+
 CSR instr  ---> | hyp_csr_file                                                      |
 trap, xRET ---> |   +- priv_mode_reg  {V, level}                                    |
                 |   +- trap_deleg     M / HS / VS                                   |
                 |   satp, vsatp, hgatp, mstatus, vsstatus, mode                     |
                 |            |                                                      |
 translate  ---> | sequencer -+-> tlb (lookup / fill / flush)                        |
 fences     ---> |            +-> ptw_2stage (VS-stage walk, G-stage walks) ------------> PTE reads
 result     <--- | perm_check (hyp_pkg)                                              |
                 +-------------------------------------------------------------------+
```

## Files

| file | content |
|---|---|
| `rtl/hyp_pkg.sv` | Sv39/Sv39x4 widths, mode encoding, PTE and translation structs, CSR addresses, cause codes, the permission-check function |
| `rtl/priv_mode_reg.sv` | the {V, level} register and its trap/MRET/SRET transitions |
| `rtl/trap_deleg.sv` | handler-mode selection |
| `rtl/hyp_csr_file.sv` | the CSRs, access rules, trap entry and return; instantiates the two above |
| `rtl/tlb.sv` | fully associative TLB for native and guest translations |
| `rtl/ptw_2stage.sv` | Sv39 walker with the nested G-stage walks |
| `rtl/hyp_ext_top.sv` | everything wired together, plus the translation sequencer |
| `tb/*_tb.sv` | one self-checking testbench per module, plus `two_stage_levels_tb` and `mmu_random_tb` |

## Privilege modes

`priv_mode_t` is `{v, prv}`. The five legal values are `MODE_M` {0,M},
`MODE_HS` {0,S}, `MODE_U` {0,U}, `MODE_VS` {1,S} and `MODE_VU` {1,U}. The
register resets to M and changes on three events:

| event | new mode |
|---|---|
| trap | the handler mode chosen by `trap_deleg` |
| MRET | level = `mstatus.MPP`; V = `mstatus.MPV` (forced to 0 if MPP is M) |
| SRET with V=1 | VS or VU from `vsstatus.SPP`; V stays 1 |
| SRET with V=0 | HS or U from `mstatus.SPP`; V = `hstatus.SPV` |

So the hypervisor enters a guest with SRET after setting `hstatus.SPV=1`, or M
enters it with MRET after setting `mstatus.MPV=1`.

## Trap delegation

A trap raised in mode *m* with cause *c*:

1. goes to **M** if *m* is M, or if bit *c* of `medeleg` (exceptions) or
   `mideleg` (interrupts) is clear;
2. otherwise goes to **VS** if *m* is VS or VU and bit *c* of `hedeleg` or
   `hideleg` is also set;
3. otherwise goes to **HS**.

A trap never moves to a less privileged mode than the one it came from. A trap
from VS or VU can end in any of M, HS and VS. A trap from HS or U can end only
in M or HS.

Two details come from the hypervisor specification:

- The VS interrupts (causes 2, 6 and 10) are always delegated past M. When VS
  handles one, `vscause` shows it as the matching supervisor interrupt (1, 5
  or 9).
- Guest page faults (causes 20, 21 and 23) and `ecall` from VS (cause 10) can
  be delegated to HS but never to VS: their `hedeleg` bits read as zero. Only
  the hypervisor can fix its own page table.

## CSRs

`hyp_csr_file` implements:

- **M:** `mstatus` (with MPV and GVA), `misa` (RV64 ACHIMSU), `medeleg`,
  `mideleg`, `mie`, `mip`, `mtvec`, `mscratch`, `mepc`, `mcause`, `mtval`,
  `mtinst`, `mtval2`
- **S:** `sstatus`, `sie`, `sip`, `stvec`, `sscratch`, `sepc`, `scause`,
  `stval`, `satp`
- **H:** `hstatus`, `hedeleg`, `hideleg`, `hie`, `hip`, `hvip`, `htval`,
  `htinst`, `hgatp`, `htimedelta`, `hcounteren`, `hgeie`, `hgeip`, `henvcfg`
- **VS:** `vsstatus`, `vsie`, `vsip`, `vstvec`, `vsscratch`, `vsepc`,
  `vscause`, `vstval`, `vsatp`

Unlisted WARL fields read as zero. `satp`, `vsatp` and `hgatp` accept only
Bare and Sv39 (Sv39x4 for `hgatp`); a write with any other mode is ignored.
`hgatp.PPN[1:0]` is forced to zero, because the G-stage root is 16 KiB
aligned. There are no guest external interrupt lines (GEILEN=0), so `hgeie`,
`hgeip` and `hstatus.VGEIN` read as zero. `henvcfg` reads as zero because none
of its optional features exist. `htimedelta` and `hcounteren` are plain
registers: the hart has no counters for them to act on.

**Access rules.** The CSR port handles one instruction per cycle. The read
data and the two exception flags are combinational. A legal write lands at the
next clock edge. `RS` and `RC` set or clear the bits given in `csr_wdata`.
`RD` reads without writing. The core sends it for CSRRS/CSRRC with rs1 = x0,
and it is the only legal access to a read-only CSR.

| mode | S addresses (0x1xx) | VS addresses (0x2xx) and H addresses (0x6xx) | M addresses (0x3xx) |
|---|---|---|---|
| M | yes | yes | yes |
| HS | yes (`satp` traps if `mstatus.TVM`) | yes | illegal |
| U | illegal | illegal | illegal |
| VS | **redirected to the VS copy** (`satp`→`vsatp` is a virtual instruction if `hstatus.VTVM`) | virtual instruction | illegal |
| VU | virtual instruction | virtual instruction | illegal |

Writes to read-only addresses (0xCxx and up, here only `hgeip`) and accesses to unimplemented
addresses are illegal. The *virtual-instruction* exception (cause 22) is the
hypervisor's cue to emulate. It is raised for accesses that would have been
legal if V were 0.

**Trap entry.** When `trap_valid` is high, the handler mode's registers are
written at the next edge:

- **M:** `mepc`, `mcause`, `mtval`, and `mtval2` = `trap_gpa >> 2`.
  `mstatus`: MPIE←MIE, MIE←0, MPP←old level, MPV←old V, GVA←`trap_gva`.
- **HS:** `sepc`, `scause`, `stval`, and `htval` = `trap_gpa >> 2`.
  `mstatus`: SPIE←SIE, SIE←0, SPP←(old level is S).
  `hstatus`: SPV←old V, SPVP←old level (only when V was 1), GVA←`trap_gva`.
- **VS:** `vsepc`, `vscause`, `vstval`. `vsstatus`: SPIE, SIE and SPP as above.

`trap_pc` is the handler address, valid in the same cycle. It is the selected
xtvec, plus 4×cause for interrupts when that xtvec is in vectored mode.
`mtinst` and `htinst` are written as zero, which the specification allows.

**Return.** MRET and SRET pop the matching stack. `ret_pc` is `mepc`, or
`sepc` when V=0, or `vsepc` when V=1.

**Not included.** Interrupts are not generated: pending and enable bits are
only stored. Counters and PMP are not included. The TW/TSR/VTW/VTSR trap bits are stored but have no effect,
because the instructions they trap are decoded in the core.

## Two-stage address translation

This is the most involved part of the design.

### Single stage (native, V=0)

Sv39 uses the low 39 bits of the virtual address. Bits 63..39 must copy bit
38, or the access is a page fault. The 39 bits split into three 9-bit fields,
VPN[2], VPN[1] and VPN[0], plus a 12-bit page offset. `satp.PPN` (44 bits)
points to the root table.

The walker reads the 8-byte entry VPN[2] of the root table. That entry either
points to the next table or is a leaf (R or X set). The walk continues down
through VPN[1] and VPN[0]. A leaf at level 2, 1 or 0 maps a 1 GiB, 2 MiB or
4 KiB page. A native walk takes at most 3 reads.

### Two stages (V=1)

- **VS-stage.** The guest's tree, rooted at `vsatp`. It has exactly the same
  format and maps a GVA to a GPA.
- **G-stage.** The hypervisor's tree, rooted at `hgatp`. It maps a GPA to an
  HPA. Its format is Sv39x4: the GPA is 41 bits wide, the root table is
  16 KiB, and its top index is 11 bits (GPA[40:30]). The lower levels are
  Sv39.

The guest's tables live in guest-physical memory. So every PTE address the
VS-stage produces is a GPA, and the walker must translate it before it can
read the PTE. `ptw_2stage` does it this way:

```
for level = 2, 1, 0 of the VS-stage:
    PTE address (GPA) = vsatp-or-previous-PPN * 4096 + VPN[level] * 8
    G-stage walk of that GPA             -> up to 3 reads (implicit access: needs R)
    read the VS PTE at the resulting HPA -> 1 read
    leaf? -> leave the loop
G-stage walk of the final GPA            -> up to 3 reads (checked later for the access type)
```

The worst case is 3 × (3 + 1) + 3 = **15 memory reads** for one TLB miss. A
native miss costs at most 3. Superpages in either stage shorten the walk: a
guest whose tables sit in one 1 GiB G-stage page needs 9 reads for a 4 KiB
page. Either stage can be Bare (MODE 0 in `vsatp` or `hgatp`), and is then
skipped. With both Bare the GVA is the HPA.

The walker's state machine is:

`IDLE → S1_ADDR → (G_START → G_REQ ⇄ G_WAIT) → S1_REQ → S1_WAIT → … → DONE`

`g_final_q` records whether the current G-stage walk is for a VS PTE address
or for the final GPA. It has one memory read in flight at a time.

### Faults

| problem | stage | reported as |
|---|---|---|
| non-canonical GVA/VA; VS/native PTE with V=0, W without R, reserved bits 63:54 set, no leaf at level 0, misaligned superpage, A=0 | VS / native | page fault (12/13/15) |
| GPA wider than 41 bits; G-stage PTE invalid as above; G leaf with U=0 or A=0; G leaf of a VS table address without R | G | guest page fault (20/21/23) |
| access type not allowed by the final leaf (below) | either | page fault or guest page fault |

For a guest page fault, `tr_gpa` gives the GPA that could not be translated.
That is either the address of a guest page-table entry or the final GPA. The
core passes it as `trap_gpa`, and it ends up (shifted right by 2) in `htval`
or `mtval2`. `tr_gva` tells the core that the faulting address is a guest
virtual address. The core passes that as `trap_gva`, which sets the GVA bit.

The access permissions of the final page are checked by
`hyp_pkg::perm_check`. It runs on every answer, whether it comes from the TLB
or from a walk:

- **First stage (VS or native):**
  - a U-level access needs U=1;
  - an S-level access to a U page needs SUM=1, and never works for a fetch;
  - a fetch needs X;
  - a load needs R, or X with MXR;
  - a store needs W and D.
- **G-stage:** the access is treated as a user access (U=1 is already
  enforced by the walker). A fetch needs X, a load R (or X with
  `mstatus.MXR`), a store W and D.

When the first stage refuses the access, that page fault wins even if the
final GPA also has no G-stage mapping: the VS leaf's permissions are checked
before the G-stage translation of the final GPA. The walker flags a guest
fault on the final GPA (`fault_final`), and the top then checks the VS leaf
first.

SUM and MXR come from `vsstatus` for a guest, from `mstatus` otherwise, and
`mstatus.MXR` also applies to a guest's first stage. The hardware never sets
the A and D bits. A page with A=0, or a store to a page with D=0, faults, and
software must set the bits.

### TLB

A TLB entry holds one *finished* translation, GVA→HPA for a guest or VA→PA
for the host (`xlat_t`):

- the host PPN and the guest PPN;
- both stages' permission bits, with one enable bit per stage;
- a page size, which for a guest is the **smaller** of the two stages' leaf
  sizes. For example, a 2 MiB guest page backed by 4 KiB host pages gives
  4 KiB entries.

The tag is the 29-bit page number, the V bit, the ASID (from `satp` or
`vsatp`) and, for guest entries, the VMID from `hgatp`. A native entry never
matches a guest lookup and the reverse. Entries with the G (global) bit match
any ASID.

On a hit, the PPN and guest PPN of the 4 KiB page are rebuilt from the entry
and the low page-number bits of the address. This is how `tr_gpa` is still
exact on a hit.

The TLB has `TLB_ENTRIES` entries (8 by default), fully associative. A fill
goes to the first invalid entry, or else to a round-robin victim. An entry is
also cached when the access that caused the walk then fails the permission
check. Only walk faults are not cached.

Fences go through the `sfence_vma`, `hfence_vvma` and `hfence_gvma` ports:

| fence | issued in | flushes |
|---|---|---|
| SFENCE.VMA | HS | native entries |
| SFENCE.VMA | VS/VU | the current VMID's guest entries, same as HFENCE.VVMA |
| HFENCE.VVMA | — | the current VMID's guest entries |
| HFENCE.GVMA | — | all guest entries, or one VMID's |

`fence_use_addr`/`fence_addr` narrow a fence to one page. For HFENCE.GVMA,
`fence_addr` is the GPA shifted right by 2. `fence_use_id`/`fence_id` narrow
it to one ASID, or to one VMID for HFENCE.GVMA. An ASID-narrowed fence leaves
global entries alone.

## Top-level interface and timing

`hyp_ext_top` has one parameter, `TLB_ENTRIES` (default 8). Its port groups
are:

- **CSR** (`csr_*`): as in `hyp_csr_file`.
- **Trap** (`trap_*`): as in `hyp_csr_file`. `trap_pc` is the handler
  address.
- **Return** (`mret`, `sret`, `ret_pc`): `mode` is the current {V, level}.
  At most one of trap, MRET and SRET may be high in a cycle; an assertion
  checks this.
- **Fences:** described above. Issue them only while `tr_ready` is high; an
  assertion checks this too.
- **Translation:** `tr_valid` and `tr_ready` hand over `tr_vaddr` and
  `tr_acc` (`ACC_LOAD`, `ACC_STORE` or `ACC_FETCH`). The regime follows
  `mode`:
  - M: Bare. MPRV is not implemented.
  - HS, U: `satp`, which may be Bare.
  - VS, VU: `vsatp` and `hgatp`.

  `tr_done` pulses for one cycle with `tr_paddr`, or with `tr_exc`,
  `tr_cause`, `tr_gpa` and `tr_gva`. `tr_tlb_hit` marks answers that came from
  the TLB.
- **Memory** (`mem_req_valid`, `mem_req_ready`, `mem_req_addr`,
  `mem_resp_valid`, `mem_resp_data`): 8-byte PTE reads. Each accepted request
  gets exactly one single-cycle response later. An assertion in the walker
  checks that responses only arrive when a read is outstanding.

Latencies, in cycles from the request being accepted:

| case | `tr_done` after |
|---|---|
| Bare or TLB hit | 1 cycle (no memory read) |
| TLB miss | the walk; `tr_done` comes in the cycle after the last PTE read response |

The walker holds one walk at a time. The core must not change the mode or the
translation CSRs while a translation is in progress.

## Verification

Every testbench is self-checking. Each prints a line
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

| testbench | what it does |
|---|---|
| `trap_deleg_tb` | both delegation chains from VS and from VU, no delegation below the raising mode, VS interrupt renumbering, and 4000 random cases against a reference table |
| `priv_mode_reg_tb` | 3000 random trap/MRET/SRET events against a reference model; all five modes must be reached |
| `hyp_csr_file_tb` | a directed scenario with every expected register value written out: WARL masks, VS redirection, virtual-instruction and illegal accesses, traps to VS/HS/M, `htval`, `hstatus` SPV/SPVP/GVA, SRET HS→VS and VS→VU, vectored `mtvec`, the read/set/clear forms, the read-only `hgeip` |
| `tlb_tb` | ASID, global, V and VMID matching; 2 MiB and 1 GiB entries; all fence kinds with and without narrowing; replacement once full |
| `ptw_2stage_tb` | page tables in a sparse memory model with random latency; 600 walks in six regimes (native, both stages, VS Bare, G Bare, both Bare, guest tables behind 4 KiB G pages) compared with a procedural reference walker, including the read count (the 15-read worst case must occur) |
| `hyp_ext_top_tb` | end to end at default parameters: the core's role through M → HS → VS → HS → VS → HS → M → VU, with Bare, native and two-stage translation, TLB hits (answered in one cycle with no memory read), page and guest page faults fed back as traps, fences and their effect, and CSR virtualisation. It counts 15 mechanisms and fails if any never happens. |
| `mmu_random_tb` | randomized end to end: random page tables for all three trees (random sizes, R/W/X/U, A/D sometimes clear), then 3000 random translations, fences and mode changes (trap to M, random MPP/MPV/SUM/MXR, MRET) through the top. Each answer is compared with a reference two-stage walk plus permission check, so a TLB hit must give the same answer as a walk. TLB hits and walks, both fault kinds and all five modes must occur. |
| `two_stage_levels_tb` | all nine combinations of VS-stage and G-stage page sizes (4 KiB / 2 MiB / 1 GiB) plus the three native sizes, through the top: walk result, TLB coverage of the smaller page, and the right fault just past it |

To simulate with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/hyp_pkg.sv tb/hyp_ext_top_tb.sv --top-module hyp_ext_top_tb
./obj_dir/Vhyp_ext_top_tb
```

Other testbenches work the same way; pass the module under test if it is not
found through `-y rtl`. All testbenches run in well under a second. They use
`$urandom`, so pass `+verilator+seed+N` to vary the seed.

## What comes from where

**From the source description:**

- the set of parts: new privilege modes, CSRs, trap handling, page-table
  walker, TLB;
- the modes VS, VU and HS, and the three handler modes a trap from VS or VU
  can reach;
- the Sv39 geometry: 39 significant address bits, three 9-bit VPN fields, a
  12-bit offset, a 44-bit `satp.PPN`, up to three levels, and 4 KiB / 2 MiB /
  1 GiB pages;
- the principle that a guest's page-table addresses must be translated as
  well as its final address.

**From the RISC-V hypervisor specification** (which the description refers
to):

- the CSR list, field positions and update rules;
- the delegation CSRs and the exact delegation rule;
- Sv39x4 and the 16 KiB G-stage root;
- the fault kinds and `htval`/`mtval2`/GVA reporting;
- the fence semantics.

**This design's own choices:**

- all port lists and handshakes;
- the sequencing: one walk at a time, TLB lookup the cycle after the request,
  combinational CSR reads;
- the TLB: 8 entries, fully associative, round-robin, storing the combined
  translation at the smaller page size;
- no hardware A/D update;
- no walk cache;
- `mtinst`/`htinst` always written as zero.

**Not implemented**, because the description does not cover it:

- the hypervisor virtual-machine load/store instructions (HLV/HSV/HLVX);
- `mstatus.MPRV`;
- interrupt generation and guest external interrupts;
- counters and PMP;
- the core pipeline and the memory system.

The source description reports no performance figures and no workloads beyond
directed assembler tests. The testbenches above cover the same three features
it names: CSRs, trap handling and two-stage translation at different levels.
