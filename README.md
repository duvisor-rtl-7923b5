# DV-Ext: hardware for a user-level hypervisor

A conventional hypervisor on RISC-V, Arm or x86 needs a kernel-resident driver
(KVM and the like) because only kernel mode may touch the virtualization
hardware: start a VM, take its exits, edit its stage-2 page table, inject
interrupts. Every VM exit that the user-level part of the hypervisor must
handle therefore crosses the kernel twice.

The *Delegated Virtualization Extension* (DV-Ext), proposed with the DuVisor
hypervisor (Chen et al., "DuVisor: a User-level Hypervisor Through Delegated
Virtualization"), moves the run-time half of that interface to user mode. The
host kernel keeps a small control plane: it decides, per process, whether the
extension is on, which VM exits go to user mode, which VM the process owns and
which physical memory that VM may reach. Everything frequent -- taking a VM
exit, reading why it happened, resuming the guest, injecting a virtual
interrupt, waking a vCPU on another core -- then happens in user mode without
entering the kernel. Safety comes from three hardware checks rather than
from the kernel vetting each operation:

1. **Delegation is opt-in per exit type.** Only exits the kernel has delegated
   reach user mode; the timer interrupt and every protection fault still go to
   the kernel.
2. **Memory is fenced by physical ranges.** The user-level hypervisor may write
   any mapping into its VM's stage-2 page table, but every host physical
   address the VM then touches is checked against ranges the kernel set. A
   new *V bit* makes a range apply only to guest-derived addresses, so the same
   check does not fence the host.
3. **Inter-core wake-ups name vCPUs, not cores.** A user-level IPI (UIPI)
   names a vCPU; it is delivered only to a core that is running that vCPU of
   the *same* VM; anything else traps to the kernel.

This repository gives that extension as synthesizable SystemVerilog for an
eight-core system, together with self-checking testbenches. The processor it
extends (an in-order RV64 core with the RISC-V hypervisor extension) and its
two-stage MMU are not included; DV-Ext connects to them through ports.

## Modes

The core runs in one of four modes (`mode_e` in `rtl/dvext_pkg.sv`):

| mode | who runs there                                       |
|------|------------------------------------------------------|
| HS   | host kernel, including the control-plane driver      |
| HU   | host user mode: the hypervisor process and its vCPU threads |
| VS   | guest kernel                                         |
| VU   | guest user                                           |

Without DV-Ext a guest exit always lands in HS. With DV-Ext enabled for the
running process, a delegated exit lands in HU, and the new instruction HURET
goes from HU straight back to the guest.

## Registers

| register   | who may access             | holds |
|------------|----------------------------|-------|
| `hu_er`    | HS; HU when `h_enable`=1   | reason of the last delegated VM exit (bit 63 set for an interrupt) |
| `hu_einfo` | HS; HU when `h_enable`=1   | extra information, e.g. the faulting guest physical address |
| `hu_vpc`   | HS; HU when `h_enable`=1   | guest PC at the exit; HURET resumes here |
| `hu_ehb`   | HS; HU when `h_enable`=1   | address of the HU-mode exit handler |
| `hu_vitr`  | HS; HU when `h_enable`=1   | virtual interrupt number to present to the guest, 0 = none |
| `hu_vcpuid`| HS; HU when `h_enable`=1   | vCPU this core is running (UIPI target matching) |
| `h_enable` | HS                         | DV-Ext on for the running process |
| `h_deleg`  | HS                         | bit *n* set: exception cause *n* from a guest goes to HU |
| `h_vmid`   | HS                         | VM this core is running (UIPI sender/receiver matching) |
| `h_pmcsel`, `h_pmcstart`, `h_pmcend`, `h_pmccfg` | HS | window onto the 64 physical ranges |

Guest modes may access none of them. A refused access is an illegal
instruction, which is never delegated, so it reaches the host kernel. HS
may access the `hu_*` registers so that the kernel can save and restore them
when it switches processes.

CSR numbers: `hu_er`, `hu_einfo`, `hu_vpc` and `hu_ehb` reuse the numbers of
the user-level trap registers `ucause`, `utval`, `uepc` and `utvec`
(0x042, 0x043, 0x041, 0x005), because DV-Ext builds on RISC-V's user-level
trap handling. `hu_vitr` and `hu_vcpuid` are 0x800 and 0x801, and the
HS-only registers are 0x5C0-0x5C6, all in RISC-V's custom ranges. Write
masks: `h_deleg` keeps only causes 10 (hypercall), 20, 21 and 23 (stage-2 page
faults) and 22 (virtual instruction, e.g. WFI); `hu_ehb` is 4-byte aligned;
`h_vmid` is 14 bits and `hu_vcpuid` 16 bits.

## VM exits, HURET and their priority

`rtl/dvext_trap.sv` is the part to read first. Every cycle the core presents
the committing instruction's events (`core_evt_t`): an exception with its
cause and trap value, HURET, HUSUIPI, SRET, a non-delegated interrupt, and
the PC. In the same cycle the block answers with `trap_rsp_t`: whether to
flush and where to fetch, and whether the core must record an HS trap
(cause, trap value, exception PC, previous mode). The new mode is registered
at the next clock edge.

The rules, highest priority first:

1. **Interrupt for the host** (`hs_irq`, e.g. the timer) while not in HS:
   trap to HS. The scheduler stays with the kernel.
2. **Pending UIPI** while in a guest mode with `h_enable`: delegated exit,
   `hu_er` = interrupt | 0.
3. **Range-check fault** of the current access: access fault to HS (cause 1,
   5 or 7, trap value = host physical address).
4. **Exception**: if it comes from a guest mode, `h_enable` is 1 and
   `h_deleg[cause]` is set, it is a *delegated exit*: jump to `hu_ehb` in HU;
   `hu_er`, `hu_einfo`, `hu_vpc` get cause, trap value and PC. Otherwise it
   traps to HS at `hs_tvec`. Exceptions raised by HU code itself (system
   calls, its own page faults) always go to HS.
5. **HURET**: in HU with `h_enable`, return to the guest mode the last exit
   came from, at `hu_vpc`. In a guest mode it is a virtual-instruction exit
   (which may be delegated); in HS, or with `h_enable` = 0, it is illegal.
6. **HUSUIPI**: in HU with `h_enable`, offered to the UIPI router; a refused
   target traps to HS with cause 24. Outside HU it is refused like HURET.
7. **SRET** in HS: the mode becomes the one the core's own status registers
   select (`evt.sret_mode`).

A taken interrupt (rules 1 and 2) kills the committing instruction; the core
replays it after the handler returns. CSR writes of a killed or trapping
instruction are dropped (`kill` into the register file).

A typical vCPU thread therefore does: ask the kernel once to enable DV-Ext
and delegate exits; write `hu_ehb` and `hu_vcpuid`; write the guest entry
into `hu_vpc`; HURET. On each exit the handler reads `hu_er` and
`hu_einfo`, does the work (maps a page, emulates an MMIO load, ...), updates
`hu_vpc` if the guest should skip the trapping instruction, optionally writes
`hu_vitr`, and HURETs.

## Physical range checking with the V bit

`rtl/pmc_checker.sv` extends RISC-V PMP-style range registers. Each of the 64
regions per core has a start address, an end address (first byte past the
region) and the attributes en, R, W, X and V. The MMU presents each physical
access with `stage2` = 1 when the address came out of stage-2 translation or
is a stage-2 page-table access during a walk.

* A region with V = 1 applies only to `stage2` accesses; V = 0 applies to all.
* Among the applying regions the lowest-numbered one containing any byte of
  the access decides; the access passes only if it lies wholly inside that
  region and the region grants R, W or X as needed.
* A `stage2` access in no region fails; any other access in no region passes.

So the control-plane driver gives a VM its memory by programming one V-bit
region per contiguous allocation. The hypervisor may map anything into the
stage-2 page table, but a mapping that points outside the VM's regions
faults to the kernel on first use. The check is combinational: the fault
appears in the same cycle as the request.

## UIPIs between vCPUs

`rtl/uipi_router.sv` connects the cores. Each core publishes `h_enable`,
`h_vmid` and `hu_vcpuid`. A HUSUIPI with operand *t* from core *i* is
delivered to every enabled core *j* with `vmid[j] == vmid[i]` and
`vcpuid[j] == t`. Normally exactly one core matches. If none does, the sender
traps to HS. The receiver latches the UIPI into a pending bit at the next
edge. If it is running its guest, the UIPI is taken in the following cycle
as a delegated exit with reason "UIPI". If it is in HU or HS, the bit waits
until the next guest entry. Thus a vCPU thread wakes a vCPU of its own VM on
another core in two cycles of hardware time, with no kernel involvement. It
cannot disturb a core that runs another VM.

The intended use is interrupt injection: the sending thread writes the
interrupt into the target vCPU's state in memory, then sends the UIPI. The
target's thread wakes in its handler, writes `hu_vitr`, and resumes the
guest. While the core is in a guest mode, `vintr_valid`/`vintr_num` present
the interrupt. The core's interrupt logic raises `vintr_ack` when the guest
takes it, which clears `hu_vitr`.

## Files and hierarchy

```
dvext_top            NCORES = 8, NREGIONS = 64
 ├─ dvext_hart ×NCORES
 │   ├─ dvext_csr     register file and access rules
 │   ├─ dvext_trap    modes, exit routing, HURET, UIPI pending bit
 │   └─ pmc_checker   64 V-bit ranges
 └─ uipi_router       VMID/VCPUID matching between cores
dvext_pkg            modes, CSR numbers, causes, core-side bundles
```

The ports of `dvext_top` are per-core arrays of the bundles in `dvext_pkg`:
`csr_req_t`/`csr_rsp_t` (CSR instructions), `core_evt_t`/`trap_rsp_t`
(instruction events and the trap decision), `pmc_req_t` (physical accesses),
and the virtual-interrupt signals. Synthesized with default parameters, the
design holds roughly 62,000 flip-flops, almost all of them in the range
registers (8 cores × 64 regions × 117 bits).

## What is filled in beyond the published design

The published description gives the registers and instructions, which
register lets HU-mode do what, the V bit and the 64 regions, and the
VMID/VCPUID rule for UIPIs. It gives no encodings, widths, timings or
priorities. The following are this implementation's choices:

* CSR numbers of the new registers, and the indirect window onto the ranges.
* Cause codes: the RISC-V hypervisor extension's codes are used for guest
  exits; cause 24 is used for a refused HUSUIPI; "UIPI" is recorded as user
  software interrupt 0.
* The set of delegable causes (hypercall, stage-2 page faults, virtual
  instruction). Access faults from range checking can never be delegated.
* Widths: 56-bit physical addresses, 14-bit VMIDs, 16-bit VCPUIDs.
* `hu_vitr` as a number with 0 meaning "none", cleared by the guest's
  acknowledgement. The published text also calls this register `hu_vintr`
  in one place. It is the same register.
* The guest mode HURET returns to is the one recorded at the exit.
* A UIPI arriving outside guest mode waits rather than being dropped.
* Range semantics in detail: exclusive end, lowest index wins, straddling
  accesses fail. A non-guest access outside every region passes.
* Priorities, and single-cycle decisions, as listed above.
* Reset: everything 0, core in HS.
* Machine mode (firmware) is outside the model. The ranges are programmed
  from HS, matching the published flow in which the kernel driver sets
  them.

Not included: the processor pipeline and its own CSR file, the two-stage
MMU and page-table walker, caches, DRAM and NIC. These are existing parts
that DV-Ext reuses. The hypervisor and kernel software are also not
included.

## Simulation

Every block has a self-checking testbench in `tb/` that ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/dvext_pkg.sv tb/tb_dvext_top.sv --top-module tb_dvext_top
./obj_dir/Vtb_dvext_top
```

| testbench         | what it covers |
|-------------------|----------------|
| `tb_dvext_csr`    | access rules in every mode, write masks, exit update, kill, window onto the ranges |
| `tb_dvext_trap`   | delegated vs. HS exits, HURET to VS and VU, non-delegable causes, interrupt priority, UIPI waiting and exit, refused HUSUIPI, DV-Ext instructions outside HU |
| `tb_pmc_checker`  | a VM's region with V = 1 against guest and host accesses, priority, a V = 0 region, plus 4,000 random accesses against a reference model on 64 random overlapping regions |
| `tb_uipi_router`  | directed delivery and refusals, plus 5,000 random placements and sends on 8 cores against a reference model |
| `tb_dvext_hart`   | one vCPU thread's life on one core through the core-side ports |
| `tb_dvext_top`    | eight cores at default size: two VMs (4 + 2 vCPUs), stage-2 faults, a virtual-IPI ping-pong by UIPI, cross-VM and unknown-target UIPIs refused, a cross-VM memory access fenced, a timer interrupt and context switch. Each mechanism is counted and must occur |

| `tb_dvext_workloads` | the evaluated VM layouts at default size: one VM of 1, 2, 4 and 6 vCPUs with 512 MiB (stage-2 faults, emulated MMIO loads, a ring of virtual IPIs); a 4-vCPU VM with 512 to 2048 MiB (edges of its memory); eight 1-vCPU VMs side by side (UIPIs stay within each VM) |

The hardware latencies checked by the last testbench are:

| path | cycles |
|------|--------|
| guest exception -> delegated exit, core in HU at `hu_ehb` | 1 (decision in the exception's cycle, mode at the next edge) |
| HURET -> guest running at `hu_vpc` | 1 |
| HUSUIPI -> UIPI pending at the target core | 1 |
| HUSUIPI -> target guest exited to its handler | 2 |
| physical access -> range fault | 0 (same cycle) |

Testbenches need no files. Random stimulus uses `$urandom`, so a run is
repeatable for a given seed.

To change the core count or the number of ranges, override `NCORES` or
`NREGIONS` on `dvext_top`. The address and ID widths are `PA_W`, `VMID_W` and
`VCPUID_W` in `dvext_pkg`.
