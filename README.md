# CoVE hardware: confidential-VM isolation for a RISC-V SoC

CoVE is an architecture for confidential virtual machines (TVMs, "TEE VMs")
on RISC-V. Its main idea is that the host hypervisor keeps full control of
memory, CPUs and devices, as it does today, yet cannot read or change a
TVM's memory. Software does most of the work. An M-mode firmware layer, the
*TSM-driver*, switches harts in and out of the trusted world. An HS-mode
security monitor, the *TSM*, builds and runs TVMs and keeps their G-stage
page tables. For this to be safe, the hardware needs only a few primitives:

* a one-bit **Confidential qualifier** per hart, which says whether the hart
  is currently in the trusted world;
* a **Memory Tracking Table (MTT)**, which marks every physical page as
  confidential (C) or non-confidential (NC). Only trusted software may
  change it;
* an **enforcement rule** in every MMU and in the IOMMU, which checks each
  physical access against the qualifier and the page's C bit;
* **confidential guest interrupt files**, which host software cannot touch;
* a **domain tag on the fabric**, so that the memory controller can protect
  confidential data with its own key.

This repository is synthesizable SystemVerilog for those primitives, wired
into one SoC-level block, `cove_soc`, with a self-checking testbench for
each part. The harts themselves, the page-table walkers, caches, the cipher,
DRAM, the PCIe root port and the root of trust are not included. Their
signals are ports of the top.

## 1. Hart modes and the Confidential qualifier (`hart_conf_qualifier`)

The qualifier is one flip-flop per hart. **TEECALL** sets it and **TEERET**
clears it. In the architecture both are context switches that the
TSM-driver carries out: an ECALL into M-mode, state save/restore, then an
MRET. The hardware therefore accepts them only while the hart is in M-mode.
A request from any other privilege level changes nothing and raises
`call_err` for one cycle.

Together with the virtualisation bit V and the privilege level, the
qualifier gives the hart's operating mode:

| V | privilege | C | mode (`mode_e`) | translation | MTT checked |
|---|-----------|---|-----------------|-------------|-------------|
| 0 | U | 0 | U | single stage / bare | yes |
| 0 | S | 0 | HS (host OS / VMM) | single stage / bare | yes |
| – | M | – | M (TSM-driver) | bare | **no** |
| 1 | U | 0 | VU | two stage | yes |
| 1 | S | 0 | VS (ordinary guest) | two stage | yes |
| 1 | U | 1 | confidential VU (TVM user) | two stage | yes |
| 1 | S | 1 | confidential VS (TVM kernel) | two stage | yes |
| 0 | S | 1 | confidential HS (TSM) | single stage / bare | yes |
| 0 | U | 1 | (no architectural use) | single stage / bare | yes |

The last two rows are not in the architecture's mode table. This design
adds them: the TSM runs in HS-mode with the qualifier set, and it has to be
decoded somehow. M-mode runs without the MTT check, because the TSM-driver
is part of the trusted base. The block is a register plus a decoder, so its
outputs follow `priv`/`v` combinationally, and `conf` changes on the clock
edge after the pulse. Reset clears the qualifier.

## 2. The Memory Tracking Table (`mtt_table`)

The MTT records who owns each page. One bit per 4 KiB page: 1 means the page
belongs to the confidential world, 0 means it is ordinary host memory.

* **Window.** The table covers `MTT_PAGES` pages starting at page number
  `MTT_BASE_PPN` (by default 4096 pages, i.e. 16 MiB, starting at physical
  address `0x8000_0000`). Pages outside the window always read as NC and
  cannot be converted.
* **Reset.** All pages start as NC. Memory becomes confidential only when
  trusted software converts it.
* **Lookups.** `NUM_RD` independent combinational read ports, one per hart
  MMU and one for the IOMMU.
* **Who may write.** Writes are tied to the Confidential qualifier. A write
  is accepted when the writer has the qualifier set and is either
  - in M-mode (the TSM-driver), or
  - in HS-mode with V=0 (the TSM), while the **delegation bit**
    `tsm_deleg` is set.

  Only M-mode with the qualifier set may change the delegation bit. A
  confidential guest (V=1) can never write, delegation or not. Every write
  request is answered one cycle later on `wr_ack`, with `wr_err` set if it
  was refused. A refused write changes nothing.

The architecture places the MTT in memory and has the MMU walk it. It does
not define the layout of that in-memory table. This design keeps the table
on chip as a bit vector, which gives the same answer in the same cycle. An
in-memory table with a table walker and an MTT cache would be the natural
next step for large memories.

Converting, reassigning and reclaiming memory (the TVM life cycle) are
sequences of these writes, issued by the TSM-driver or the TSM.

## 3. The enforcement rule (`hart_mtt_check`)

This is the heart of the design. Every physical access of a hart goes
through the check. That includes the implicit reads a page-table walker
makes, which the hart marks with `ptw`. The access faults when

```
fault = mtt_en & ( (~conf & C) | (conf & (fetch | page_walk) & ~C) )
```

Read as a table (`mtt_en` = 1):

| hart qualifier | page | load/store | instruction fetch | page-table walk |
|----------------|------|------------|-------------------|-----------------|
| 0 (host, ordinary VM) | NC | allowed | allowed | allowed |
| 0 | C | **fault** | **fault** | **fault** |
| 1 (TSM, TVM) | NC | allowed (shared memory) | **fault** | **fault** |
| 1 | C | allowed | allowed | allowed |

The first half keeps the host out of confidential memory. The second half
protects the TVM from the host. The TVM may read and write shared NC pages,
which it needs for para-virtualised I/O. But its code and its page tables
must live in memory the host cannot change, or the host could inject code or
remap the TVM's address space.

A faulting access is consumed in the cycle it is offered (`req_ready` = 1).
It never reaches the fabric. One cycle later, `flt_valid` rises with the
RISC-V access-fault cause: 1 for a fetch, 5 for a load, 7 for a store. A
page-walk fault reports the cause of the access that started the walk. An
access that passes goes to the fabric in the same cycle (valid/ready passed
through). It is tagged with two bits:

* `qual`: the requester's qualifier, which the architecture asks to be
  carried on the fabric;
* `dom_c`: the page's C bit, the domain the memory controller uses to pick
  a key.

An assertion (`a_no_leak`) states the invariant directly: a
non-confidential requester never sends an access to a C page onto the
fabric.

A single C bit separates the trusted world from the host, not one TVM from
another: every hart with the qualifier set may reach every C page. TVMs are
kept apart by the TSM, which owns their G-stage page tables and maps each
confidential page into at most one TVM. That is why the walks of those
tables must themselves stay in C memory.

Address translation itself happens before this block. With first-stage
and/or G-stage paging off, the check sees the untranslated address.

## 4. Device DMA (`iommu_mtt_check`)

Devices reach memory through the PCIe root port and the IOMMU. Each DMA
carries a requester ID (RID), a PASID, an address and one flag: whether it
is *confidential DMA*, coming from a device interface locked to a TVM under
PCIe TDISP. The IOMMU applies the same ownership rule as the harts:

* ordinary DMA to a C page faults;
* confidential DMA is accepted only from a RID the TSM has bound. The
  IOMMU holds `NUM_TDI` bindings, and only a requester with the Confidential
  qualifier can program them: this is the "secure programming interface" of
  the IOMMU. Confidential DMA from any other RID faults, so a device cannot
  promote itself by setting the flag;
* confidential DMA may use both C pages and shared NC pages.

A faulting DMA is dropped. Its RID and PASID are reported one cycle later
(`flt_rid`, `flt_pasid`) for the IOMMU fault record. This block does no
address translation: DMA addresses are taken to be physical.

## 5. Confidential interrupt files (`intfile_guard`)

With the RISC-V Advanced Interrupt Architecture, each hart has several guest
(VS-level) interrupt files. The TSM can reserve a file for a TVM
(`asg_tee` = 1) and release it later. Only a requester with the qualifier
set can do this. Once a file is reserved, any access to it from the hart
while the hart is *not* in Confidential-mode traps:

* with an **illegal-instruction** exception (cause 2) when V=0;
* with a **virtual-instruction** exception (cause 22) when V=1.

The check is answered one cycle after `acc_valid`. Interrupt files kept in
memory need no special handling here, because the MTT protects them like
any other confidential page. Interrupt delivery is unchanged and is not part
of this design.

## 6. Memory controller front end and keys (`mem_ctrl`)

The memory controller merges traffic from the hart MMUs and the IOMMU onto
one channel. Arbitration is round robin over valid/ready ports. Each
accepted request leaves with:

* `mem_key_id`, the page's C bit. Confidential and non-confidential data are
  therefore encrypted under different keys. Per-TVM keys, which the
  architecture permits, are not built;
* `mem_src`, the port it came from. The memory returns each completion with
  that number, and `mem_ctrl` steers it back to the right requester.

The cipher, integrity and replay protection behind the channel are not
defined by the architecture and are not included.

## 7. The top level (`cove_soc`)

```
 hart i ─► hart_conf_qualifier ─(conf, mtt_en)─► hart_mtt_check ─┐
                                                   │ MTT port i   │
 IO bridge DMA ────────────────► iommu_mtt_check ──┤ MTT port N   ├─► mem_ctrl ─► memory channel
                                                   │              │   (key id = C bit)
                                               mtt_table
 hart i ─► intfile_guard (qualifier, V of hart i)
```

Per hart there are three arrays of ports: state inputs (`hart_priv`,
`hart_v`, `hart_teecall`, `hart_teeret`), the access port (`hart_req_*`,
`hart_flt_*`, `hart_rsp_valid`) and the interrupt-file port (`if_*`). The
configuration ports name the hart that issues them: `mtt_wr_hart`,
`mtt_deleg_hart` and `tdi_wr_hart`. The top passes that hart's current
qualifier and privilege to the checking block, so a port cannot be used to
claim trust the hart does not have. Read data from the memory come back on
the shared `rsp_rdata`, with a per-requester valid.

Latency, in clock cycles:

| event | result |
|-------|--------|
| access that passes | on the memory channel in the same cycle, if it wins arbitration and `mem_ready` is high |
| access that faults | `*_flt_valid` one cycle after the request |
| TEECALL/TEERET | `hart_conf` changes at the next edge |
| MTT write, delegation, RID binding, file assignment | acknowledged or refused one cycle later |
| interrupt-file access check | one cycle later |

### Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `NUM_HARTS` | 2 | `cove_soc` | harts |
| `MTT_PAGES` | 4096 | `cove_soc`, `mtt_table` | tracked 4 KiB pages |
| `MTT_BASE_PPN` | `0x80000` | `cove_soc`, `mtt_table` | first tracked page |
| `NUM_FILES` | 8 | `cove_soc`, `intfile_guard` | guest interrupt files per hart |
| `NUM_TDI` | 4 | `cove_soc`, `iommu_mtt_check` | RID bindings for confidential DMA |
| `PA_WIDTH`, `PAGE_SHIFT`, `DATA_WIDTH` | 56, 12, 64 | `cove_pkg` | physical address, page and data widths |
| `RID_WIDTH`, `PASID_WIDTH` | 16, 20 | `cove_pkg` | PCIe IDs |

The architecture fixes none of these numbers. They are ordinary RISC-V and
PCIe values, or sizes picked to give a small but complete SoC.

## 8. What follows the architecture and what is this design's own

Taken from the architecture: the one-bit qualifier, with TEECALL/TEERET as
the only way to change it; the mode table, including no MTT check in M-mode;
the exact fault equation of the hart check; MTT writes tied to the
qualifier, with TSM-driver-to-TSM delegation; the trap rule and causes for
confidential interrupt files; C-bit-based key selection; and the overall
wiring of hart MMU, IOMMU and memory controller.

Choices made here where the architecture says nothing:

* the MTT is an on-chip bit vector rather than an in-memory table;
* MTT entries are pages only; region entries are not built;
* the size and base of the tracked window, and NC for untracked pages;
* the RID binding table in the IOMMU. The architecture asks only for a
  secure programming interface bound to the qualifier;
* the IOMMU applies the hart rule to DMA: ordinary DMA is kept out of C
  pages, and confidential DMA may also use NC pages;
* decode of the V=0, C=1 modes;
* valid/ready handshakes, one-cycle fault reporting, round-robin
  arbitration and source-tagged completions;
* two keys (C/NC) rather than per-TVM keys;
* reset values: qualifier clear, all pages NC, no files reserved, no RIDs
  bound, delegation off.

Not built, because the architecture does not design them: the harts,
page-table walkers, PMP changes, caches, the memory cipher and integrity
tree, DRAM, the root of trust, IOMMU translation, the PCIe root port and
device, and all of the TSM-driver/TSM software and its ABIs.

## 9. Simulating and changing it

Every file in `rtl/` holds one package or module. `cove_pkg.sv` must be read
first. Each block has a testbench `tb/tb_<module>.sv`. The testbench prints
`TB_RESULT checks=N failures=M` and stops by itself; a watchdog ends a run
that hangs. For example:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/cove_pkg.sv \
          tb/tb_cove_soc.sv --top-module tb_cove_soc -Mdir obj -o sim
./obj/sim
```

The block testbenches drive random stimulus and compare every cycle with a
reference model written into the testbench. Each one also counts the cases
it reached (for example, each kind of fault) and fails if a case never
occurs. They cover:

* `tb_hart_conf_qualifier`: mode decode and TEECALL/TEERET from every
  privilege level;
* `tb_mtt_table`: write permission over every mix of qualifier, privilege,
  V, delegation and window, plus the read ports;
* `tb_hart_mtt_check`: the fault equation, handshake, fabric tags and
  fault causes;
* `tb_intfile_guard`: assignment and trap decisions;
* `tb_iommu_mtt_check`: DMA rule, RID binding and fault record;
* `tb_mem_ctrl`: round-robin order, key id, completion routing.

`tb_cove_soc` runs the whole SoC at its default size. Its memory is a
behavioural model of encrypted DRAM: data are stored XORed with a pad chosen
by the key id, returned two cycles later, and `mem_ready` is randomly low.
The scenario is a TVM's life:

1. the host fails to convert memory and fails to enter Confidential-mode;
2. TEECALL on hart 1, then the TSM-driver converts pages;
3. the TSM is refused until delegation, and succeeds afterwards;
4. the TVM stores, loads, fetches and walks in confidential memory, loads
   shared data, and faults on fetches and walks to NC pages;
5. the host and an ordinary guest fault on C pages, while M-mode passes;
6. interrupt files are reserved, then trap after TEERET with both causes;
7. ordinary DMA and unbound confidential DMA are refused, while bound DMA
   reads the TVM's data;
8. both harts and the device run at once, under back-pressure;
9. a page is reclaimed for the host.

The testbench checks that each of these mechanisms occurred at least once.
The run takes about 600 clock cycles.

To change the size, override the parameters of `cove_soc`. The testbenches
of the blocks already use smaller tables (for example, 256 MTT pages in
`tb_mtt_table`) to reach the window edges quickly.
