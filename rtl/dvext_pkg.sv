// dvext_pkg -- shared types and constants of the Delegated Virtualization
// Extension (DV-Ext).
//
// DV-Ext lets the hypervisor's *user* mode (HU-mode) take VM exits, resume
// the guest, install virtual interrupts and send user-level IPIs without the
// host kernel (HS-mode) on the path.  This package holds what the register
// file, the trap controller, the physical-memory checker, the UIPI router and
// the per-core wrapper share: privilege modes, CSR numbers, exception cause
// codes, the set of causes that may be delegated, and the request/response
// bundles between a core and its DV-Ext logic.
//
// Register names and their split into HU-mode (hu_*) and HS-mode (h_*)
// registers, the two instructions HURET and HUSUIPI, the V bit of the range
// registers and the 64 ranges per core follow the published design.  CSR
// numbers, cause codes, widths and bundle layouts are this implementation's
// choices: where an existing RISC-V register is named as the alias of a DV-Ext
// register (ucause, utval) its standard number is reused; the rest sit in the
// custom CSR spaces of the RISC-V privileged specification.
package dvext_pkg;

  localparam int unsigned XLEN     = 64;
  localparam int unsigned PA_W     = 56; // host physical address bits (Sv39x4 output)
  localparam int unsigned VMID_W   = 14; // RV64 maximum VMIDLEN
  localparam int unsigned VCPUID_W = 16;

  // Privilege modes seen by DV-Ext. H = host side, V = guest side;
  // U/S = user/kernel level.  Machine mode (firmware) is outside DV-Ext.
  typedef enum logic [1:0] {
    MODE_HU = 2'd0,   // hypervisor user mode: where the user-level hypervisor runs
    MODE_HS = 2'd1,   // hypervisor kernel mode: host kernel / control-plane driver
    MODE_VU = 2'd2,   // guest user mode
    MODE_VS = 2'd3    // guest kernel mode
  } mode_e;

  function automatic logic is_vmode(mode_e m);
    return (m == MODE_VU) || (m == MODE_VS);
  endfunction

  // ---------------------------------------------------------------- CSRs
  // Data-plane registers (HU-mode accessible once h_enable is set).
  localparam logic [11:0] CSR_HU_EHB    = 12'h005; // alias of utvec
  localparam logic [11:0] CSR_HU_VPC    = 12'h041; // alias of uepc
  localparam logic [11:0] CSR_HU_ER     = 12'h042; // alias of ucause
  localparam logic [11:0] CSR_HU_EINFO  = 12'h043; // alias of utval
  localparam logic [11:0] CSR_HU_VITR   = 12'h800; // custom user RW space
  localparam logic [11:0] CSR_HU_VCPUID = 12'h801;
  // Control-plane registers (HS-mode only).
  localparam logic [11:0] CSR_H_ENABLE  = 12'h5C0; // custom supervisor RW space
  localparam logic [11:0] CSR_H_DELEG   = 12'h5C1;
  localparam logic [11:0] CSR_H_VMID    = 12'h5C2;
  // Indirect window onto the physical-memory-checking range registers.
  localparam logic [11:0] CSR_H_PMCSEL   = 12'h5C3; // region index
  localparam logic [11:0] CSR_H_PMCSTART = 12'h5C4; // first byte of region
  localparam logic [11:0] CSR_H_PMCEND   = 12'h5C5; // first byte past region
  localparam logic [11:0] CSR_H_PMCCFG   = 12'h5C6; // attribute bits, pmc_attr_t

  // ----------------------------------------------------------- causes
  localparam logic [5:0] CAUSE_FETCH_ACCESS = 6'd1;
  localparam logic [5:0] CAUSE_ILLEGAL_INSN = 6'd2;
  localparam logic [5:0] CAUSE_LOAD_ACCESS  = 6'd5;
  localparam logic [5:0] CAUSE_STORE_ACCESS = 6'd7;
  localparam logic [5:0] CAUSE_ECALL_VS     = 6'd10; // hypercall
  localparam logic [5:0] CAUSE_FETCH_GPF    = 6'd20; // stage-2 page faults
  localparam logic [5:0] CAUSE_LOAD_GPF     = 6'd21;
  localparam logic [5:0] CAUSE_VIRT_INSN    = 6'd22; // sensitive instruction (WFI...)
  localparam logic [5:0] CAUSE_STORE_GPF    = 6'd23;
  localparam logic [5:0] CAUSE_UIPI_FAULT   = 6'd24; // bad HUSUIPI operand (custom)

  // Interrupt causes (hu_er / scause carry bit XLEN-1 set for these).
  localparam logic [5:0] IRQ_USER_SOFT      = 6'd0;  // UIPI, as N-Ext USIP

  // Exceptions h_deleg may hand to HU-mode.  Every other h_deleg bit is
  // read-only zero: access faults raised by the range checker must always
  // reach the host kernel.
  localparam logic [XLEN-1:0] DELEG_MASK =
      (XLEN'(1) << CAUSE_ECALL_VS)  | (XLEN'(1) << CAUSE_FETCH_GPF) |
      (XLEN'(1) << CAUSE_LOAD_GPF)  | (XLEN'(1) << CAUSE_VIRT_INSN) |
      (XLEN'(1) << CAUSE_STORE_GPF);

  // ------------------------------------------------- range-check types
  typedef enum logic [1:0] {
    ACC_READ  = 2'd0,
    ACC_WRITE = 2'd1,
    ACC_EXEC  = 2'd2
  } acc_e;

  // Attribute bits of one range register; bit order as held in h_pmccfg.
  typedef struct packed {
    logic v;   // 1: applies only to HPAs produced by stage-2 translation
    logic x;
    logic w;
    logic r;
    logic en;  // region in use
  } pmc_attr_t;

  // ------------------------------------------------ core-side bundles
  // CSR access presented by the core for an instruction at commit.
  typedef struct packed {
    logic              valid;
    logic [11:0]       addr;
    logic              we;
    logic [XLEN-1:0]   wdata;
  } csr_req_t;

  typedef struct packed {
    logic              hit;      // address belongs to DV-Ext
    logic              illegal;  // access not allowed in the current mode
    logic [XLEN-1:0]   rdata;
  } csr_rsp_t;

  // The committing instruction's events, as far as DV-Ext is concerned.
  typedef struct packed {
    logic              exc_valid;    // synchronous exception
    logic [5:0]        exc_cause;
    logic [XLEN-1:0]   exc_tval;
    logic              huret;        // HURET decoded
    logic              husuipi;      // HUSUIPI decoded
    logic [VCPUID_W-1:0] uipi_target;  // HUSUIPI operand: target VCPUID
    logic              sret;         // SRET executed in HS-mode
    mode_e             sret_mode;    // mode SRET returns to
    logic              hs_irq;       // non-delegated interrupt (e.g. timer)
    logic [5:0]        hs_irq_cause;
    logic [XLEN-1:0]   pc;           // PC of the committing instruction
  } core_evt_t;

  // Trap/redirect decision returned to the core in the same cycle.
  typedef struct packed {
    logic              redirect;     // flush and fetch from redirect_pc
    logic [XLEN-1:0]   redirect_pc;
    logic              hs_trap;      // trap to HS: core writes scause/stval/sepc
    logic [XLEN-1:0]   hs_cause;
    logic [XLEN-1:0]   hs_tval;
    logic [XLEN-1:0]   hs_epc;
    mode_e             hs_prev_mode; // mode the trap came from (SPP/SPV)
  } trap_rsp_t;

  // Physical access presented to the range checker.
  typedef struct packed {
    logic              valid;
    logic [PA_W-1:0]   addr;      // host physical address
    logic [1:0]        size_log2; // 1, 2, 4 or 8 bytes
    acc_e              acc;
    logic              stage2;    // HPA came from stage-2 translation or an S2PT walk
  } pmc_req_t;

endpackage
