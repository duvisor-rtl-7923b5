// dvext_trap -- privilege-mode controller and VM-exit router of one core.
//
// Tracks which of the four modes (HU, HS, VU, VS) the core runs in and, for
// the instruction committing this cycle, decides where control goes:
//
//  * A VM exit from a guest mode whose cause has its h_deleg bit set (and
//    h_enable = 1) is a delegated VM exit: the core jumps to hu_ehb in
//    HU-mode, and hu_er / hu_einfo / hu_vpc receive the cause, the trap value
//    and the guest PC.  The host kernel is not entered.
//  * Every other trap (non-delegated exits, faults of HU-mode code, physical
//    interrupts such as the timer, range-checker faults) goes to HS-mode at
//    hs_tvec, and the core records scause/stval/sepc from rsp.
//  * HURET in HU-mode with h_enable = 1 resumes the guest at hu_vpc in the
//    guest mode it left.
//  * HUSUIPI in HU-mode with h_enable = 1 is passed to the UIPI router; if the
//    router rejects the target (no core of the same VM runs that vCPU) the
//    instruction traps to HS-mode with cause CAUSE_UIPI_FAULT.
//  * A received UIPI stays pending until the core is in a guest mode, and is
//    then taken as a delegated VM exit with hu_er = interrupt | 0.
//  * HURET / HUSUIPI in a guest mode raise a virtual-instruction exit (which
//    may itself be delegated); in HS-mode or without h_enable they are illegal.
//
// Priority in one cycle: non-delegated interrupt > pending UIPI > range-check
// fault > exception > HURET / HUSUIPI > SRET.  A taken interrupt kills the
// committing instruction (the core replays it).  The choice and order of
// these rules beyond what the published design states (delegation by
// h_deleg, handler at hu_ehb, resume at hu_vpc, UIPI causes a VM exit to
// HU-mode, a bad HUSUIPI wakes the host kernel, timer interrupts stay with
// the kernel) are this implementation's.
//
// Timing: rsp and the exit write port are combinational from the inputs in
// the same cycle; the mode and the UIPI pending bit change at the next rising
// edge.  Reset enters HS-mode.
module dvext_trap
  import dvext_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  core_evt_t             evt,
  // range-checker fault of the current access
  input  logic                  pmc_fault,
  input  acc_e                  pmc_acc,
  input  logic [PA_W-1:0]       pmc_addr,
  // register values
  input  logic                  h_enable,
  input  logic [XLEN-1:0]       h_deleg,
  input  logic [XLEN-1:0]       hu_ehb,
  input  logic [XLEN-1:0]       hu_vpc,
  input  logic [XLEN-1:0]       hs_tvec,     // host kernel trap vector (core's stvec)
  // UIPI
  output logic                  uipi_send,   // HUSUIPI issued to the router
  input  logic                  uipi_send_fault,
  input  logic                  uipi_deliver,// a UIPI arrives for this core
  output logic                  uipi_pending,
  // to the core and the register file
  output trap_rsp_t             rsp,
  output mode_e                 mode,
  output logic                  exit_we,
  output logic [XLEN-1:0]       exit_er,
  output logic [XLEN-1:0]       exit_einfo,
  output logic [XLEN-1:0]       exit_vpc
);
  mode_e mode_q, mode_d, vpriv_q, vpriv_d;
  logic  pend_q, uipi_take;
  logic  in_v;

  localparam logic [XLEN-1:0] INTR = {1'b1, {(XLEN-1){1'b0}}};

  assign in_v = is_vmode(mode_q);

  always_comb begin
    logic [XLEN-1:0] deleg;
    deleg      = h_deleg & DELEG_MASK;
    mode_d     = mode_q;
    vpriv_d    = vpriv_q;
    rsp        = '0;
    rsp.hs_prev_mode = mode_q;
    exit_we    = 1'b0;
    exit_er    = '0;
    exit_einfo = '0;
    exit_vpc   = evt.pc;
    uipi_send  = 1'b0;
    uipi_take  = 1'b0;

    if (evt.hs_irq && mode_q != MODE_HS) begin
      hs_trap(INTR | XLEN'(evt.hs_irq_cause), '0);
    end else if (pend_q && in_v && h_enable) begin
      uipi_take = 1'b1;
      hu_exit(INTR | XLEN'(IRQ_USER_SOFT), '0);
    end else if (pmc_fault) begin
      unique case (pmc_acc)
        ACC_WRITE: hs_trap(XLEN'(CAUSE_STORE_ACCESS), XLEN'(pmc_addr));
        ACC_EXEC:  hs_trap(XLEN'(CAUSE_FETCH_ACCESS), XLEN'(pmc_addr));
        default:   hs_trap(XLEN'(CAUSE_LOAD_ACCESS),  XLEN'(pmc_addr));
      endcase
    end else if (evt.exc_valid) begin
      route(evt.exc_cause, evt.exc_tval, deleg);
    end else if (evt.huret) begin
      if (mode_q == MODE_HU && h_enable) begin
        mode_d          = vpriv_q;
        rsp.redirect    = 1'b1;
        rsp.redirect_pc = hu_vpc;
      end else if (in_v) route(CAUSE_VIRT_INSN, '0, deleg);
      else               hs_trap(XLEN'(CAUSE_ILLEGAL_INSN), '0);
    end else if (evt.husuipi) begin
      if (mode_q == MODE_HU && h_enable) begin
        uipi_send = 1'b1;
        if (uipi_send_fault) hs_trap(XLEN'(CAUSE_UIPI_FAULT), XLEN'(evt.uipi_target));
      end else if (in_v) route(CAUSE_VIRT_INSN, '0, deleg);
      else               hs_trap(XLEN'(CAUSE_ILLEGAL_INSN), '0);
    end else if (evt.sret && mode_q == MODE_HS) begin
      mode_d = evt.sret_mode;
    end
  end

  // trap to the host kernel
  function automatic void hs_trap(input logic [XLEN-1:0] cause, input logic [XLEN-1:0] tval);
    mode_d          = MODE_HS;
    rsp.redirect    = 1'b1;
    rsp.redirect_pc = {hs_tvec[XLEN-1:2], 2'b00};
    rsp.hs_trap     = 1'b1;
    rsp.hs_cause    = cause;
    rsp.hs_tval     = tval;
    rsp.hs_epc      = evt.pc;
  endfunction

  // delegated VM exit to the user-level hypervisor
  function automatic void hu_exit(input logic [XLEN-1:0] cause, input logic [XLEN-1:0] tval);
    mode_d          = MODE_HU;
    vpriv_d         = mode_q;
    rsp.redirect    = 1'b1;
    rsp.redirect_pc = hu_ehb;
    exit_we         = 1'b1;
    exit_er         = cause;
    exit_einfo      = tval;
  endfunction

  function automatic void route(input logic [5:0] cause, input logic [XLEN-1:0] tval,
                                input logic [XLEN-1:0] deleg);
    if (in_v && h_enable && deleg[cause]) hu_exit(XLEN'(cause), tval);
    else                                  hs_trap(XLEN'(cause), tval);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q  <= MODE_HS;
      vpriv_q <= MODE_VS;
      pend_q  <= 1'b0;
    end else begin
      mode_q  <= mode_d;
      vpriv_q <= vpriv_d;
      pend_q  <= (pend_q && !uipi_take) || uipi_deliver;
    end
  end

  assign mode         = mode_q;
  assign uipi_pending = pend_q;

  // HU-mode is entered from a guest mode only through a delegated exit,
  // which requires DV-Ext to be enabled.
  always_comb begin
    if (in_v && mode_d == MODE_HU)
      assert (h_enable) else $error("delegated VM exit with h_enable = 0");
  end
endmodule
