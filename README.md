# ASMI: hardware partitioning of physical memory among virtual machines

A hypervisor that hands out physical memory to virtual machines can also read
it, remap it or give it to someone else. ASMI (Architectural Support for
Memory Isolation) takes that power away from software. Physical memory is cut
into equal **segments**, each holding a fixed number of pages, and each
segment belongs to at most one VM. The owner of every segment is written in a
**Memory Protection Table (MPT)** that only a hardware unit, **Pro-mem**, can
read or write. Pro-mem sits between the paging unit and primary memory. It:

- gives out pages and segments when a VM asks for memory, and never ahead of time;
- keeps a fair share, **MSEG = TSEG / TOT**. TSEG is the number of segments.
  TOT is the number of running VMs plus the hypervisor. When memory runs out,
  a VM holding more than MSEG segments is told to give the extra back;
- gives each VM a unique ID and loads it into the processor's **VMIDR**
  register. VMIDR is saved and restored by hardware on VM Entry and VM Exit;
- checks every memory access against the MPT and VMIDR. An access to a
  segment that is not the running VM's own raises an exception. This holds
  for the hypervisor too.

Guest page tables hold real physical addresses, so an address needs only one
translation step. Pro-mem only checks the result. This repository gives
synthesizable SystemVerilog for Pro-mem, the MPT, the SegMax unit, the VM ID
pool and the VMIDR register, with a self-checking testbench for each. The
scheme was published as a concept with no implementation. Every width,
handshake, encoding and timing below is this design's own choice. The
sections say which parts follow the published description.

## Address layout

With the default parameters, a 32-bit physical address is split as

```
 31          20 19        12 11          0
+--------------+------------+-------------+
|  segment ID  | page index | byte offset |
|  SEG_W = 12  | PIDX_W = 8 |  PAGE_W=12  |
+--------------+------------+-------------+
```

That gives 4096 segments of 256 pages of 4 KiB (1 MiB segments) and 8-bit VM
IDs. ID 0 is always the hypervisor.

Two places in memory are closed to all software, the hypervisor included:

- **Segment 0** is the MPT's area. The published scheme keeps the MPT in a
  reserved part of primary memory. Here Pro-mem works from an on-chip copy
  (see *Departures*) and writes every change through to segment 0. Word *s*
  of segment 0 holds the entry of segment *s*: `{valid, first, vmid}`,
  zero-extended. `OP_HV_START` first clears the words of segments 0 to
  TSEG-1. Segment 0 is never allotted and never accessible.
- **Page 0 of an owner's first segment.** Its first word holds the owner's
  saved VMIDR (see *Switching VMs*). When an owner gets its first segment,
  page 0 is marked used, the owner receives page 1, and the access check
  refuses page 0.

TSEG is set once by the hypervisor at start-up and is locked until reset.
Segments 1 to TSEG-1 can be allotted. TSEG can be smaller than 2^SEG_W, for
example when less memory is fitted.

## Requests to Pro-mem

The processor sends one request at a time on `cmd_*` (a valid/ready
handshake). Pro-mem answers with exactly one `rsp_valid` pulse, carrying
`rsp_status`, `rsp_addr` and `rsp_vmid`.

| `cmd_op` | who may issue | effect | status |
|---|---|---|---|
| `OP_HV_START` (arg = TSEG) | once per reset | TSEG set and locked; hypervisor gets ID 0; VMIDR = 0; TOT = 1 | OK / DENIED if repeated |
| `OP_VM_CREATE` | hypervisor | lowest free ID assigned; hypervisor's VMIDR saved; VMIDR = new ID; TOT + 1 | OK (`rsp_vmid`) / DENIED |
| `OP_VM_DESTROY` (vmid) | hypervisor | every segment of the VM freed in the MPT; ID released; TOT - 1 | OK / DENIED |
| `OP_VM_ENTRY` (vmid) | hypervisor | VMIDR saved to the hypervisor's first segment, then loaded from the VM's | OK / DENIED |
| `OP_VM_EXIT` | a VM | VMIDR saved to the VM's first segment, then loaded from the hypervisor's | OK / DENIED |
| `OP_PAGE_ALLOC` | running VM or hypervisor | see *Allocation* | OK (`rsp_addr`) / RECLAIM / MEM_FULL |
| `OP_PAGE_FREE` (arg = page address) | owner of the page | page marked free; a segment left with no used page leaves the MPT | OK / DENIED |

`OP_PAGE_FREE` is this design's addition. The published scheme says only that
a VM frees memory "through swapping". Some request is needed for freed pages
to come back to Pro-mem.

## Allocation and the fair share

This is the part of the design with the most policy in it. `promem_ctrl`
keeps three records:

- one page-use bit per page, beside each MPT entry (`mpt_mem`);
- a segment count per VM ID;
- each owner's first segment.

An `OP_PAGE_ALLOC` from the VM in VMIDR (call it *R*) goes through four steps:

1. **Own segment.** The MPT is scanned one entry per cycle, from segment 1
   upward. The first segment that R owns and that still has a clear page bit
   gives its lowest free page. The scan stops there.
2. **Free segment.** During the same scan, the first unallotted segment below
   TSEG is remembered. If step 1 found nothing, that segment is written to
   the MPT as R's, and R's count goes up. If it is R's first segment, R gets
   page 1, otherwise page 0.
3. **Reclaim.** If no segment is free, the VM IDs are scanned, one per cycle,
   for a VM that holds more than MSEG segments. The requester and the
   hypervisor are skipped. The first VM found gets a one-cycle notice
   (`reclaim_valid`, `reclaim_vmid`, `reclaim_count`). `reclaim_count` is how
   many segments it holds above MSEG. R gets `ST_RECLAIM` and should retry
   after the other VM has swapped out and freed pages.
4. **Memory full.** If no VM is above MSEG, R gets `ST_MEM_FULL`. This is the
   exception a guest OS answers by swapping its own pages.

Pro-mem does not wait for the reclaim or enforce it. It reports and returns.
Together, the steps guarantee every running VM at least MSEG segments once
memory is full, and they leave no segment idle while some VM wants one.

MSEG is recomputed by `segmax_unit` whenever TOT changes. It uses a restoring
divider, one quotient bit per cycle. The controller does not accept a new
request while the divider is busy, so every allocation sees a current MSEG.

Worked example (the end-to-end test, phase B), with TSEG = 4:

- The hypervisor takes segment 1.
- VM 1 takes segments 2 and 3.
- VM 2 is created. TOT becomes 3 and MSEG = 4 / 3 = 1.
- VM 2 asks for a page. No segment is free, and VM 1 holds 2 > 1 segments.
  So VM 1 is told to return 1 segment, and VM 2 gets `ST_RECLAIM`.
- VM 1 frees all pages of segment 3, and segment 3 leaves the MPT.
- VM 2's retry gets segment 3 page 1. Page 0 is VM 2's save word.
- Once segment 3 is full, VM 2 asks again. VM 1 now holds only MSEG
  segments, so VM 2 gets `ST_MEM_FULL`.

## Switching VMs: VMIDR save and restore

VMIDR is changed only by Pro-mem. On VM Exit, Pro-mem does two memory
operations:

1. It writes the VM's ID to the first word of the VM's first segment.
2. It reads the first word of the hypervisor's first segment into VMIDR.

VM Entry does the same with the roles swapped. VM creation saves the
hypervisor's ID the same way, then loads the new ID. An owner that has no
segment yet has no save word: its store is skipped and VMIDR is loaded with
the ID directly.

Both operations go over the memory port (`mem_arb` gives Pro-mem priority).
While they run, `ctx_busy` is high and any access from the paging unit waits
(`pu_stall`). An access is therefore judged entirely under the old VMIDR or
entirely under the new one. This is how the switch is made atomic. Because
the save words cannot be reached by software, no one can forge the ID that
gets reloaded.

## Access checking

`access_check` is combinational and runs in the same cycle as `pu_req`. The
segment field of the address indexes the MPT through a second read port.
The result is one of:

| cause | refused when |
|---|---|
| `AF_MPT_AREA` | segment 0 |
| `AF_RANGE` | segment >= TSEG |
| `AF_FREE` | segment not allotted |
| `AF_OWNER` | segment allotted to another ID than VMIDR |
| `AF_SAVE` | page 0 of the owner's first segment |

A refused access raises `pu_fault` with `pu_cause` and never reaches memory.
An allowed access goes to memory unchanged and ends with `pu_ack`. The checked
physical address also goes back to the paging unit on `pu_paddr`. The
paging unit holds `pu_req` until it sees one of the two.

## Blocks and files

```
asmi_top
 ├─ promem_ctrl    request FSM: allocation, reclaim, create/destroy, VMIDR switch
 ├─ mpt_mem        MPT entries {valid, first, vmid} + page-use words; 1 write, 2 read ports
 ├─ segmax_unit    TSEG (locked), TOT, MSEG = TSEG / TOT
 ├─ vmid_alloc     unique IDs, lowest free first (hypervisor gets 0)
 ├─ access_check   per-access validation
 ├─ vmidr_reg      the processor's VMIDR
 └─ mem_arb        memory port shared by Pro-mem and the paging unit
asmi_pkg           widths, MPT entry struct, request/status/fault enums
```

Every file starts with a comment on its function, interface and timing.

Timing, in clock cycles:

| action | cycles |
|---|---|
| access check | 0 (combinational), plus the memory latency |
| `OP_PAGE_ALLOC` | 1 + position of the segment found (at most TSEG); +1 for a new segment; + up to 256 for the reclaim scan |
| `OP_VM_DESTROY` | about TSEG (the MPT scan) + one memory write per freed segment |
| any MPT change (new segment, released segment) | + one memory write |
| `OP_HV_START` | TSEG memory writes (clearing the MPT area) |
| `OP_VM_ENTRY` / `OP_VM_EXIT` / `OP_VM_CREATE` | 2 + two memory transactions |
| MSEG after a change of TOT | SEG_W + 3 |

At full size the tables are:

- an MPT of 4096 x 10 bits, 4096 of them valid flip-flops;
- a page-use memory of 4096 x 256 bits (1 Mbit);
- 256 per-VM records.

## Parameters

| parameter | default | where |
|---|---|---|
| `SEG_W` | 12 (4096 segments) | `asmi_top`, `promem_ctrl`, `mpt_mem`, `access_check`, `segmax_unit` |
| `PIDX_W` | 8 (256 pages per segment) | same, except `segmax_unit` |
| `PAGE_W` | 12 (4 KiB pages) | `asmi_pkg` |
| `VMID_W` | 8 | `asmi_pkg` |
| `DATA_W` | 32 (memory word) | `asmi_pkg` |

The physical address width is `SEG_W + PIDX_W + PAGE_W`. The 32-bit default
matches the 0x00000000 to 0xFFFFFFFF address map of the published scheme,
whose example table (segment 1 to the hypervisor, segment 2 to VM 2,
segment 5 to VM 3) fits easily. The split into segments and pages is this
design's choice.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/asmi_pkg.sv tb/tb_asmi_top.sv --top-module tb_asmi_top -o sim
./obj_dir/sim
```

Replace `asmi_top` with any other block name to run its testbench.

| testbench | what it checks |
|---|---|
| `tb_asmi_top` | End to end at the default sizes, with a behavioural memory of random latency (`tb/mem_model.sv`). Phase A boots with TSEG = 4096: allocation, isolation of the hypervisor and the VMs, every fault cause, VMIDR saved to and reloaded from memory, an access stalled during VM Entry, destroy and ID reuse. Phase B boots with TSEG = 4: reclaim notice, freeing, memory-full exception, reuse of a destroyed VM's segment. Expected addresses are worked out by hand. Each mechanism is counted and must occur. |
| `tb_fig1_mpt` | Builds, through ordinary requests, the example table of the published address map (segment 1 to the hypervisor, 2 to VM 2, 5 to VM 3). Reads it back from the MPT and from its copy in memory, and probes each owner's access rights. Default sizes. |
| `tb_promem_ctrl` | 4500 random requests at 16 segments x 4 pages, compared with a reference model of the allocation rules. Checks every response, the reclaim notice, VMIDR and the final MPT. |
| `tb_access_check` | 20000 random address / MPT / VMIDR cases against the refusal rules. |
| `tb_mpt_mem` | Both read ports and both write paths against a reference copy; reset empties the table. |
| `tb_segmax_unit` | MSEG = TSEG / TOT after every change, TSEG lock, and the SEG_W + 3 cycle latency. |
| `tb_vmid_alloc` | Unique, lowest-first IDs, exhaustion and release. |
| `tb_vmidr_reg` | Reset to 0, load and hold. |

## Departures from the published scheme and what is not here

- **The MPT is read from chip, not from memory.** The published scheme
  stores the table in the reserved memory area. Here the area in memory is
  kept up to date, but checks and allocation read an on-chip array with no
  delay, which needs 1 Mbit at full size. A design that keeps only the table
  in DRAM would need a table cache or an extra memory read per access.
- **Page tracking, the save-word page and `OP_PAGE_FREE` are additions.**
  The scheme requires "free pages in the allotted segments" and VMIDR saved
  at a segment's start, but does not say how.
- **VM Exit loads VMIDR *from* the hypervisor's save word.** One sentence of
  the scheme says VMIDR "is loaded with the initial address" of the
  hypervisor's first segment. The matching sentence for VM Entry says it is
  loaded *from* that address, and that reading is used for both.
- **The reclaim search leaves out the hypervisor.** The scheme speaks of
  "any of the VMs". Reclaim is a notice only; swapping is the guest's job.
- **One processor.** The scheme gives every processor a VMIDR. Several
  processors would need one VMIDR and one request port each, plus
  arbitration of the controller.
- **Not built: the paging unit, the CPU and its modified VM Entry / VM Exit
  instructions, and the DRAM.** They appear only as the `pu_*`, `cmd_*` and
  `mem_*` ports. x86 segmentation, which the scheme re-enables, is not
  modelled either.
- **No DMA path.** The scheme argues that DMA becomes safe because segments
  are isolated. A DMA engine would have to present the owning VM's ID to
  `access_check`. No such port is built.
- **No memory scrubbing.** Freed or destroyed segments are not cleared; the
  scheme says nothing about it.
- **The scheme gives no sizes, latencies or measurements.** Nothing here can
  be held against a published number.
