// tb_dvext_trap -- self-checking test of the mode controller / VM-exit router.
//
// Walks a core through the sequences of a user-level hypervisor: the host
// kernel enters the guest with SRET, a stage-2 page fault goes to the host
// kernel while DV-Ext is off and to the HU-mode handler once h_deleg
// delegates it, HURET resumes the guest in the mode it left, non-delegable
// causes (illegal instruction, range-check fault, timer interrupt) always
// reach HS-mode, a received UIPI waits for guest mode and then exits to
// HU-mode, HUSUIPI goes to the router and traps on a rejected target, and
// HURET/HUSUIPI outside HU-mode are refused.  Each step's redirect, trap
// fields, exit-register update and next mode are compared with values
// written out here.
module tb_dvext_trap;
  import dvext_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  core_evt_t evt;
  logic pmc_fault;
  acc_e pmc_acc;
  logic [PA_W-1:0] pmc_addr;
  logic h_enable;
  logic [XLEN-1:0] h_deleg, hu_ehb, hu_vpc, hs_tvec;
  logic uipi_send, uipi_send_fault, uipi_deliver, uipi_pending;
  trap_rsp_t rsp;
  mode_e mode;
  logic exit_we;
  logic [XLEN-1:0] exit_er, exit_einfo, exit_vpc;

  dvext_trap dut (.*);

  localparam logic [XLEN-1:0] INTR = 64'h8000_0000_0000_0000;
  localparam logic [XLEN-1:0] EHB  = 64'h0000_0000_0040_1000;
  localparam logic [XLEN-1:0] TVEC = 64'hFFFF_FFFF_8000_0100;

  int checks = 0, failures = 0;
  int n_deleg = 0, n_hs = 0, n_huret = 0, n_uipi = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic core_evt_t nop(input logic [XLEN-1:0] pc);
    core_evt_t e;
    e = '0;
    e.pc = pc;
    e.sret_mode = MODE_HS;
    return e;
  endfunction

  // present one event for one cycle; check the response kind
  typedef enum {EXP_NONE, EXP_HS, EXP_HU, EXP_RESUME} exp_e;

  task automatic step(input core_evt_t e, input exp_e kind, input logic [XLEN-1:0] cause,
                      input logic [XLEN-1:0] tval, input mode_e next, input string what);
    // called at a falling edge; steps run back to back
    evt = e;
    #1;
    unique case (kind)
      EXP_NONE:
        check(!rsp.redirect && !rsp.hs_trap && !exit_we, {what, ": no redirect"});
      EXP_HS: begin
        n_hs++;
        check(rsp.redirect && rsp.redirect_pc == TVEC && rsp.hs_trap && !exit_we &&
              rsp.hs_cause == cause && rsp.hs_tval == tval && rsp.hs_epc == e.pc &&
              rsp.hs_prev_mode == mode,
              $sformatf("%s: trap to HS cause=%h tval=%h (got redirect=%b pc=%h cause=%h tval=%h)",
                        what, cause, tval, rsp.redirect, rsp.redirect_pc, rsp.hs_cause, rsp.hs_tval));
      end
      EXP_HU: begin
        n_deleg++;
        check(rsp.redirect && rsp.redirect_pc == EHB && !rsp.hs_trap && exit_we &&
              exit_er == cause && exit_einfo == tval && exit_vpc == e.pc,
              $sformatf("%s: delegated exit er=%h einfo=%h (got redirect=%b pc=%h we=%b er=%h)",
                        what, cause, tval, rsp.redirect, rsp.redirect_pc, exit_we, exit_er));
      end
      EXP_RESUME: begin
        n_huret++;
        check(rsp.redirect && rsp.redirect_pc == hu_vpc && !rsp.hs_trap && !exit_we,
              {what, ": HURET resumes at hu_vpc"});
      end
    endcase
    @(negedge clk);
    evt = nop(e.pc + 4);
    check(mode == next, $sformatf("%s: mode %s, expected %s", what, mode.name(), next.name()));
  endtask

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_evt_t e;
    evt = nop(64'h1000); pmc_fault = 0; pmc_acc = ACC_READ; pmc_addr = '0;
    h_enable = 0; h_deleg = '0; hu_ehb = EHB; hu_vpc = 64'h8000_0000; hs_tvec = TVEC | 64'h1;
    uipi_send_fault = 0; uipi_deliver = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(mode == MODE_HS && !uipi_pending, "reset in HS-mode");

    // host kernel enters the guest
    e = nop(64'hFFFF_FFFF_8000_2000); e.sret = 1; e.sret_mode = MODE_VS;
    step(e, EXP_NONE, 0, 0, MODE_VS, "SRET to VS");

    // S2PF with DV-Ext off: host kernel
    e = nop(64'h8000_0040); e.exc_valid = 1; e.exc_cause = CAUSE_LOAD_GPF; e.exc_tval = 64'h1_0000_0000;
    step(e, EXP_HS, 64'd21, 64'h1_0000_0000, MODE_HS, "S2PF, DV-Ext off");

    // turn DV-Ext on, delegate S2PF and WFI
    h_enable = 1;
    h_deleg = (64'd1 << CAUSE_LOAD_GPF) | (64'd1 << CAUSE_STORE_GPF) | (64'd1 << CAUSE_VIRT_INSN);
    e = nop(64'h10); e.sret = 1; e.sret_mode = MODE_HU;
    step(e, EXP_NONE, 0, 0, MODE_HU, "SRET to HU");
    // HU-mode code's own exception goes to the kernel (ecall from U = 8)
    e = nop(64'h20); e.exc_valid = 1; e.exc_cause = 6'd8;
    step(e, EXP_HS, 64'd8, 0, MODE_HS, "syscall from HU");
    e = nop(64'h24); e.sret = 1; e.sret_mode = MODE_VS;
    step(e, EXP_NONE, 0, 0, MODE_VS, "SRET to VS again");

    // delegated S2PF: straight to the user-level handler
    e = nop(64'h8000_0040); e.exc_valid = 1; e.exc_cause = CAUSE_LOAD_GPF; e.exc_tval = 64'h1_0000_0000;
    step(e, EXP_HU, 64'd21, 64'h1_0000_0000, MODE_HU, "delegated S2PF");
    e = nop(EHB); e.huret = 1;
    step(e, EXP_RESUME, 0, 0, MODE_VS, "HURET back to VS");

    // delegated sensitive instruction from VU remembers VU
    e = nop(64'h8000_0000); e.sret = 1;  // SRET in VS is not a DV-Ext event
    step(e, EXP_NONE, 0, 0, MODE_VS, "SRET in guest ignored");
    // (enter VU through a delegated exit + HURET path: mode is VS; use VS->HS->VU)
    e = nop(64'h8000_0100); e.exc_valid = 1; e.exc_cause = 6'd13;  // load page fault, not delegable
    step(e, EXP_HS, 64'd13, 0, MODE_HS, "guest page fault to HS");
    e = nop(64'h30); e.sret = 1; e.sret_mode = MODE_VU;
    step(e, EXP_NONE, 0, 0, MODE_VU, "SRET to VU");
    e = nop(64'h4000); e.exc_valid = 1; e.exc_cause = CAUSE_VIRT_INSN;
    step(e, EXP_HU, 64'd22, 0, MODE_HU, "WFI exit from VU");
    hu_vpc = 64'h4004;
    e = nop(EHB + 8); e.huret = 1;
    step(e, EXP_RESUME, 0, 0, MODE_VU, "HURET back to VU");

    // non-delegable causes go to HS even with every h_deleg bit set
    h_deleg = '1;
    e = nop(64'h4008); e.exc_valid = 1; e.exc_cause = CAUSE_ILLEGAL_INSN;
    step(e, EXP_HS, 64'd2, 0, MODE_HS, "illegal instruction not delegable");
    e = nop(64'h34); e.sret = 1; e.sret_mode = MODE_VS;
    step(e, EXP_NONE, 0, 0, MODE_VS, "SRET to VS (3)");
    @(negedge clk);
    pmc_fault = 1; pmc_acc = ACC_WRITE; pmc_addr = 56'h00_0000_F000_0000;
    e = nop(64'h8000_0200);
    step(e, EXP_HS, 64'd7, 64'hF000_0000, MODE_HS, "range-check fault to HS");
    pmc_fault = 0;
    e = nop(64'h38); e.sret = 1; e.sret_mode = MODE_VS;
    step(e, EXP_NONE, 0, 0, MODE_VS, "SRET to VS (4)");
    // timer interrupt beats a simultaneous delegable exception
    e = nop(64'h8000_0300); e.hs_irq = 1; e.hs_irq_cause = 6'd5;
    e.exc_valid = 1; e.exc_cause = CAUSE_LOAD_GPF;
    step(e, EXP_HS, INTR | 64'd5, 0, MODE_HS, "timer interrupt to HS");
    // a hypercall is delegable
    e = nop(64'h3C); e.sret = 1; e.sret_mode = MODE_VS;
    step(e, EXP_NONE, 0, 0, MODE_VS, "SRET to VS (5)");
    e = nop(64'h8000_0400); e.exc_valid = 1; e.exc_cause = CAUSE_ECALL_VS;
    step(e, EXP_HU, 64'd10, 0, MODE_HU, "hypercall delegated");

    // UIPI arriving in HU-mode waits for the guest
    @(negedge clk); uipi_deliver = 1; @(negedge clk); uipi_deliver = 0;
    check(uipi_pending, "UIPI pending");
    step(nop(EHB + 16), EXP_NONE, 0, 0, MODE_HU, "UIPI not taken in HU");
    check(uipi_pending, "UIPI still pending in HU");
    hu_vpc = 64'h8000_0404;
    e = nop(EHB + 20); e.huret = 1;
    step(e, EXP_RESUME, 0, 0, MODE_VS, "HURET with UIPI pending");
    e = nop(64'h8000_0404);
    step(e, EXP_HU, INTR, 0, MODE_HU, "UIPI VM exit");
    n_uipi++;
    check(!uipi_pending, "UIPI consumed");

    // HUSUIPI from HU: accepted, then rejected
    e = nop(EHB + 24); e.husuipi = 1; e.uipi_target = 16'd3;
    @(negedge clk); evt = e; #1;
    check(uipi_send && !rsp.redirect, "HUSUIPI sent");
    uipi_send_fault = 1; #1;
    check(uipi_send && rsp.hs_trap && rsp.hs_cause == 64'd24 && rsp.hs_tval == 64'd3,
          "rejected HUSUIPI traps to HS");
    @(negedge clk); evt = nop(EHB + 28); uipi_send_fault = 0;
    check(mode == MODE_HS, "HS after rejected HUSUIPI");

    // HURET / HUSUIPI outside HU-mode
    e = nop(64'h40); e.huret = 1;
    step(e, EXP_HS, 64'd2, 0, MODE_HS, "HURET in HS illegal");
    e = nop(64'h44); e.sret = 1; e.sret_mode = MODE_VS;
    step(e, EXP_NONE, 0, 0, MODE_VS, "SRET to VS (6)");
    e = nop(64'h8000_0500); e.huret = 1;
    step(e, EXP_HU, 64'd22, 0, MODE_HU, "HURET in guest is a virtual-instruction exit");
    h_enable = 0;
    e = nop(EHB); e.husuipi = 1;
    @(negedge clk); evt = e; #1;
    check(!uipi_send && rsp.hs_trap && rsp.hs_cause == 64'd2, "HUSUIPI without h_enable illegal");
    @(negedge clk); evt = nop(64'h0);
    check(mode == MODE_HS, "HS after illegal HUSUIPI");
    // with h_enable = 0 a delegable exit goes to HS
    e = nop(64'h48); e.sret = 1; e.sret_mode = MODE_VS;
    step(e, EXP_NONE, 0, 0, MODE_VS, "SRET to VS (7)");
    e = nop(64'h8000_0600); e.exc_valid = 1; e.exc_cause = CAUSE_STORE_GPF; e.exc_tval = 64'h77;
    step(e, EXP_HS, 64'd23, 64'h77, MODE_HS, "no delegation without h_enable");

    check(n_deleg >= 4 && n_hs >= 8 && n_huret >= 3 && n_uipi == 1, "every path taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
