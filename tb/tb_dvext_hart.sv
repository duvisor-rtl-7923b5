// tb_dvext_hart -- self-checking test of the DV-Ext logic of one core.
//
// Plays the life of one vCPU thread through the core-side ports: the host
// kernel (HS-mode) enables DV-Ext, delegates stage-2 page faults and WFI
// exits, sets the VMID and one V-bit memory region, and enters HU-mode; the
// hypervisor installs its handler base and VCPUID and resumes the guest with
// HURET; a guest stage-2 fault lands in the handler, which reads hu_er and
// hu_einfo through CSR instructions, queues a virtual interrupt in hu_vitr
// and resumes; the guest sees the interrupt and acknowledges it; a guest
// access outside its region and a guest touching a DV-Ext register trap to
// the host kernel; HUSUIPI and an incoming UIPI use the router port.
module tb_dvext_hart;
  import dvext_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  csr_req_t csr_req;  csr_rsp_t csr_rsp;
  core_evt_t evt;     trap_rsp_t trap_rsp;
  logic [XLEN-1:0] hs_tvec;
  mode_e mode;
  pmc_req_t pmc_req;  logic pmc_fault;
  logic vintr_valid;  logic [5:0] vintr_num; logic vintr_ack;
  logic uipi_en, uipi_send, uipi_send_fault, uipi_deliver, uipi_pending;
  logic [VMID_W-1:0] uipi_vmid;
  logic [VCPUID_W-1:0] uipi_vcpuid, uipi_target;

  dvext_hart dut (.*);

  localparam logic [XLEN-1:0] TVEC = 64'hFFFF_FFFF_8000_0000;
  localparam logic [XLEN-1:0] EHB  = 64'h0000_0000_0001_0000;

  int checks = 0, failures = 0;
  logic [XLEN-1:0] pc;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic core_evt_t nop();
    core_evt_t e;
    e = '0; e.pc = pc; e.sret_mode = MODE_HS;
    return e;
  endfunction

  // one cycle with the given inputs; outputs are sampled before the edge
  csr_rsp_t s_csr; trap_rsp_t s_trap; logic s_pmcf, s_send;
  task automatic cyc(input csr_req_t c, input core_evt_t e, input pmc_req_t p);
    csr_req = c; evt = e; pmc_req = p;
    #1;
    s_csr = csr_rsp; s_trap = trap_rsp; s_pmcf = pmc_fault; s_send = uipi_send;
    @(negedge clk);
    csr_req = '0; evt = nop(); pmc_req = '0;
    pc = s_trap.redirect ? s_trap.redirect_pc : pc + 4;
  endtask

  task automatic csr_write(input logic [11:0] a, input logic [XLEN-1:0] d);
    cyc('{valid: 1'b1, addr: a, we: 1'b1, wdata: d}, nop(), '0);
    check(s_csr.hit && !s_csr.illegal && !s_trap.redirect,
          $sformatf("csr write %h in %s", a, mode.name()));
  endtask

  task automatic csr_read(input logic [11:0] a, input logic [XLEN-1:0] exp);
    cyc('{valid: 1'b1, addr: a, we: 1'b0, wdata: '0}, nop(), '0);
    check(s_csr.hit && !s_csr.illegal && s_csr.rdata == exp,
          $sformatf("csr read %h = %h, expected %h", a, s_csr.rdata, exp));
  endtask

  task automatic sret_to(input mode_e m);
    core_evt_t e;
    e = nop(); e.sret = 1; e.sret_mode = m;
    cyc('0, e, '0);
    check(mode == m, $sformatf("SRET to %s", m.name()));
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_evt_t e;
    pc = 64'h8000_0000; hs_tvec = TVEC;
    csr_req = '0; evt = nop(); pmc_req = '0; vintr_ack = 0;
    uipi_send_fault = 0; uipi_deliver = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(mode == MODE_HS && !uipi_en, "reset");

    // host kernel: control plane set-up
    csr_write(CSR_H_ENABLE, 1);
    csr_write(CSR_H_DELEG, (64'd1 << CAUSE_LOAD_GPF) | (64'd1 << CAUSE_STORE_GPF) |
                           (64'd1 << CAUSE_VIRT_INSN));
    csr_write(CSR_H_VMID, 64'd9);
    csr_write(CSR_H_PMCSEL, 64'd3);
    csr_write(CSR_H_PMCSTART, 64'h2_0000_0000);
    csr_write(CSR_H_PMCEND,   64'h2_2000_0000);   // 512 MiB
    csr_write(CSR_H_PMCCFG,   64'h1F);            // en R W X V
    check(uipi_en && uipi_vmid == 9, "router sees enable and VMID");
    sret_to(MODE_HU);

    // hypervisor: handler base, vCPU id, guest entry point, resume
    csr_write(CSR_HU_EHB, EHB);
    csr_write(CSR_HU_VCPUID, 64'd2);
    csr_write(CSR_HU_VPC, 64'h8020_0000);
    check(uipi_vcpuid == 2, "router sees VCPUID");
    // HU may not touch control-plane registers: illegal instruction to HS
    cyc('{valid: 1'b1, addr: CSR_H_DELEG, we: 1'b1, wdata: '1}, nop(), '0);
    check(s_csr.illegal && s_trap.hs_trap && s_trap.hs_cause == 64'd2 && mode == MODE_HS,
          "HU write of h_deleg traps to HS");
    sret_to(MODE_HU);
    e = nop(); e.huret = 1;
    cyc('0, e, '0);
    check(s_trap.redirect && s_trap.redirect_pc == 64'h8020_0000 && mode == MODE_VS,
          "HURET enters the guest");

    // guest: legal access inside its region
    cyc('0, nop(), '{valid: 1'b1, addr: 56'h2_0000_1000, size_log2: 3, acc: ACC_WRITE, stage2: 1'b1});
    check(!s_pmcf && !s_trap.redirect && mode == MODE_VS, "guest access in region");

    // guest: stage-2 page fault, delegated
    e = nop(); e.exc_valid = 1; e.exc_cause = CAUSE_LOAD_GPF; e.exc_tval = 64'h4000_0000;
    cyc('0, e, '0);
    check(s_trap.redirect && s_trap.redirect_pc == EHB && !s_trap.hs_trap && mode == MODE_HU,
          "S2PF reaches the HU handler");
    csr_read(CSR_HU_ER, 64'd21);
    csr_read(CSR_HU_EINFO, 64'h4000_0000);
    csr_read(CSR_HU_VPC, 64'h8020_0004);
    // queue a virtual interrupt (supervisor external, 9 -> guest-visible 10)
    csr_write(CSR_HU_VITR, 64'd10);
    check(!vintr_valid, "virtual interrupt not shown in HU-mode");
    e = nop(); e.huret = 1;
    cyc('0, e, '0);
    check(mode == MODE_VS && vintr_valid && vintr_num == 10, "guest sees virtual interrupt");
    @(negedge clk); vintr_ack = vintr_valid; @(negedge clk); vintr_ack = 0;
    check(!vintr_valid, "acknowledge clears it");

    // guest reaches outside its region: access fault to HS
    cyc('0, nop(), '{valid: 1'b1, addr: 56'h0_8000_0000, size_log2: 3, acc: ACC_READ, stage2: 1'b1});
    check(s_pmcf && s_trap.hs_trap && s_trap.hs_cause == 64'd5 &&
          s_trap.hs_tval == 64'h8000_0000 && mode == MODE_HS, "range fault to host kernel");
    // host itself reaches anywhere
    cyc('0, nop(), '{valid: 1'b1, addr: 56'h0_8000_0000, size_log2: 3, acc: ACC_READ, stage2: 1'b0});
    check(!s_pmcf && !s_trap.redirect, "host access unrestricted");
    sret_to(MODE_VS);

    // guest touches a DV-Ext register: illegal instruction to HS
    cyc('{valid: 1'b1, addr: CSR_HU_ER, we: 1'b0, wdata: '0}, nop(), '0);
    check(s_csr.illegal && s_trap.hs_trap && s_trap.hs_cause == 64'd2, "guest CSR access refused");
    sret_to(MODE_VS);

    // WFI exit, then HUSUIPI from the handler
    e = nop(); e.exc_valid = 1; e.exc_cause = CAUSE_VIRT_INSN;
    cyc('0, e, '0);
    check(mode == MODE_HU, "WFI exit delegated");
    csr_read(CSR_HU_ER, 64'd22);
    e = nop(); e.husuipi = 1; e.uipi_target = 16'd5;
    csr_req = '0; evt = e; #1;
    check(uipi_send && uipi_target == 5 && !trap_rsp.redirect, "HUSUIPI to router");
    @(negedge clk); evt = nop();

    // an incoming UIPI while in HU waits, then exits the guest
    uipi_deliver = 1; @(negedge clk); uipi_deliver = 0;
    check(uipi_pending && mode == MODE_HU, "UIPI pending in HU");
    e = nop(); e.huret = 1;
    cyc('0, e, '0);
    check(mode == MODE_VS, "resumed with UIPI pending");
    cyc('0, nop(), '0);
    check(s_trap.redirect && s_trap.redirect_pc == EHB && mode == MODE_HU && !uipi_pending,
          "UIPI exits the guest");
    csr_read(CSR_HU_ER, 64'h8000_0000_0000_0000);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
