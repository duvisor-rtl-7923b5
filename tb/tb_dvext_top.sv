// tb_dvext_top -- end-to-end test of DV-Ext on an eight-core system, at the
// design's default sizes (8 cores, 64 ranges per core).
//
// The testbench plays the software on each core through the core-side ports:
//   * host kernel: turns DV-Ext on, delegates stage-2 page faults, WFI exits
//     and hypercalls, gives each VM a VMID and one V-bit memory region;
//   * VM A: four vCPUs on cores 0-3 (VMID 1); VM B: two vCPUs on cores 4-5
//     (VMID 2); cores 6-7 stay with the host;
//   * each vCPU thread installs its handler and VCPUID and enters its guest
//     with HURET; each guest takes a delegated stage-2 page fault;
//   * a virtual IPI ping-pong in VM A: vCPU 0 makes a hypercall, its thread
//     sends a UIPI to vCPU 1, which exits, gets a virtual interrupt injected
//     and answers with a UIPI back to vCPU 0;
//   * VM B tries to send to a vCPU of VM A and to a vCPU nobody runs: both
//     fault to the host kernel and nothing is delivered;
//   * a guest of VM A reaches into VM B's memory: range fault to HS;
//   * a timer interrupt takes a core to the host kernel, which saves and
//     restores the DV-Ext registers around a context switch.
// Each mechanism is counted; one that never happened is a failure.
module tb_dvext_top;
  import dvext_pkg::*;

  localparam int unsigned NCORES = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  csr_req_t  csr_req [NCORES];
  csr_rsp_t  csr_rsp [NCORES];
  core_evt_t evt     [NCORES];
  logic [XLEN-1:0] hs_tvec [NCORES];
  trap_rsp_t trap_rsp [NCORES];
  mode_e     mode     [NCORES];
  pmc_req_t  pmc_req  [NCORES];
  logic [NCORES-1:0] pmc_fault, vintr_valid, vintr_ack, uipi_pending;
  logic [5:0] vintr_num [NCORES];

  dvext_top dut (.*);

  localparam logic [XLEN-1:0] TVEC = 64'hFFFF_FFFF_8000_0000;
  localparam logic [XLEN-1:0] EHB  = 64'h0000_0000_0001_0000;

  int checks = 0, failures = 0;
  int n_deleg_s2pf = 0, n_deleg_wfi = 0, n_deleg_hcall = 0, n_huret = 0, n_hs_trap = 0;
  int n_uipi_sent = 0, n_uipi_exit = 0, n_uipi_fault = 0, n_pmc_fault = 0;
  int n_vintr = 0, n_ctx_switch = 0;
  logic [XLEN-1:0] pc [NCORES];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic core_evt_t nop(input int c);
    core_evt_t e;
    e = '0; e.pc = pc[c]; e.sret_mode = MODE_HS;
    return e;
  endfunction

  task automatic idle_all();
    for (int c = 0; c < NCORES; c++) begin
      csr_req[c] = '0; evt[c] = nop(c); pmc_req[c] = '0;
    end
  endtask

  // one cycle of core c; every other core idles; outputs sampled before the edge
  csr_rsp_t s_csr; trap_rsp_t s_trap; logic s_pmcf;
  task automatic cyc(input int c, input csr_req_t r, input core_evt_t e, input pmc_req_t p);
    idle_all();
    csr_req[c] = r; evt[c] = e; pmc_req[c] = p;
    #1;
    s_csr = csr_rsp[c]; s_trap = trap_rsp[c]; s_pmcf = pmc_fault[c];
    if (s_trap.hs_trap) n_hs_trap++;
    @(negedge clk);
    idle_all();
    pc[c] = s_trap.redirect ? s_trap.redirect_pc : pc[c] + 4;
  endtask

  task automatic wr(input int c, input logic [11:0] a, input logic [XLEN-1:0] d);
    cyc(c, '{valid: 1'b1, addr: a, we: 1'b1, wdata: d}, nop(c), '0);
    check(s_csr.hit && !s_csr.illegal, $sformatf("core %0d write %h", c, a));
  endtask

  task automatic rd(input int c, input logic [11:0] a, output logic [XLEN-1:0] d);
    cyc(c, '{valid: 1'b1, addr: a, we: 1'b0, wdata: '0}, nop(c), '0);
    check(s_csr.hit && !s_csr.illegal, $sformatf("core %0d read %h", c, a));
    d = s_csr.rdata;
  endtask

  task automatic sret(input int c, input mode_e m);
    core_evt_t e;
    e = nop(c); e.sret = 1; e.sret_mode = m;
    cyc(c, '0, e, '0);
    check(mode[c] == m, $sformatf("core %0d SRET to %s", c, m.name()));
  endtask

  task automatic huret(input int c);
    core_evt_t e;
    e = nop(c); e.huret = 1;
    cyc(c, '0, e, '0);
    check(is_vmode(mode[c]) && s_trap.redirect, $sformatf("core %0d HURET", c));
    n_huret++;
  endtask

  // guest exception on core c; expect a delegated exit with this reason
  task automatic guest_exit(input int c, input logic [5:0] cause, input logic [XLEN-1:0] tval);
    core_evt_t e;
    logic [XLEN-1:0] er, einfo;
    e = nop(c); e.exc_valid = 1; e.exc_cause = cause; e.exc_tval = tval;
    cyc(c, '0, e, '0);
    check(mode[c] == MODE_HU && s_trap.redirect_pc == EHB && !s_trap.hs_trap,
          $sformatf("core %0d exit cause %0d delegated", c, cause));
    rd(c, CSR_HU_ER, er);
    rd(c, CSR_HU_EINFO, einfo);
    check(er == XLEN'(cause) && einfo == tval, $sformatf("core %0d hu_er/hu_einfo", c));
    unique case (cause)
      CAUSE_LOAD_GPF, CAUSE_STORE_GPF: n_deleg_s2pf++;
      CAUSE_VIRT_INSN:                 n_deleg_wfi++;
      default:                         n_deleg_hcall++;
    endcase
  endtask

  // HUSUIPI from core c's handler; returns whether the router refused it
  task automatic husuipi(input int c, input logic [VCPUID_W-1:0] target, output bit faulted);
    core_evt_t e;
    e = nop(c); e.husuipi = 1; e.uipi_target = target;
    cyc(c, '0, e, '0);
    faulted = s_trap.hs_trap && s_trap.hs_cause == XLEN'(CAUSE_UIPI_FAULT);
    if (faulted) n_uipi_fault++; else n_uipi_sent++;
  endtask

  // receiver core c, called right after the sending HUSUIPI: the UIPI became
  // pending at that edge and exits the running guest in the next cycle
  task automatic take_uipi(input int c);
    logic [XLEN-1:0] er;
    check(uipi_pending[c] && is_vmode(mode[c]), $sformatf("core %0d UIPI pending in guest", c));
    cyc(c, '0, nop(c), '0);
    check(mode[c] == MODE_HU && s_trap.redirect_pc == EHB, $sformatf("core %0d UIPI exit", c));
    rd(c, CSR_HU_ER, er);
    check(er == 64'h8000_0000_0000_0000, $sformatf("core %0d exit reason UIPI", c));
    n_uipi_exit++;
  endtask

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XLEN-1:0] d, saved_vpc, saved_ehb, saved_vcpuid, saved_vitr;
    bit f;
    for (int c = 0; c < NCORES; c++) begin
      pc[c] = 64'hFFFF_FFFF_8000_1000 + 64'(c) * 64'h100;
      hs_tvec[c] = TVEC;
    end
    idle_all(); vintr_ack = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- control plane: host kernel sets up cores 0-5
    for (int c = 0; c < 6; c++) begin
      bit vm_b;
      vm_b = (c >= 4);
      wr(c, CSR_H_ENABLE, 1);
      wr(c, CSR_H_DELEG, (64'd1 << CAUSE_LOAD_GPF) | (64'd1 << CAUSE_STORE_GPF) |
                         (64'd1 << CAUSE_VIRT_INSN) | (64'd1 << CAUSE_ECALL_VS));
      wr(c, CSR_H_VMID, vm_b ? 64'd2 : 64'd1);
      wr(c, CSR_H_PMCSEL, 64'd0);
      wr(c, CSR_H_PMCSTART, vm_b ? 64'h3_0000_0000 : 64'h2_0000_0000);
      wr(c, CSR_H_PMCEND,   vm_b ? 64'h3_2000_0000 : 64'h2_2000_0000);
      wr(c, CSR_H_PMCCFG, 64'h1F);
      sret(c, MODE_HU);
      // ---- vthread: handler, vCPU id, entry, HURET
      wr(c, CSR_HU_EHB, EHB);
      wr(c, CSR_HU_VCPUID, vm_b ? 64'(c - 4) : 64'(c));
      wr(c, CSR_HU_VPC, 64'h8000_0000);
      huret(c);
    end
    for (int c = 6; c < NCORES; c++) check(mode[c] == MODE_HS, "cores 6-7 stay in HS");

    // ---- every guest faults on an unmapped page; the vthread maps it and resumes
    for (int c = 0; c < 6; c++) begin
      guest_exit(c, (c % 2) ? CAUSE_STORE_GPF : CAUSE_LOAD_GPF, 64'h1000 * 64'(c + 1));
      wr(c, CSR_HU_VPC, 64'h8000_0000);   // retry the access
      huret(c);
      cyc(c, '0, nop(c), '{valid: 1'b1, addr: (c >= 4 ? 56'h3_0000_0000 : 56'h2_0000_0000) +
                           56'h1000 * 56'(c + 1), size_log2: 3, acc: ACC_READ, stage2: 1'b1});
      check(!s_pmcf && is_vmode(mode[c]), $sformatf("core %0d access after mapping", c));
    end

    // ---- virtual IPI ping-pong in VM A: vCPU 0 -> vCPU 1 -> vCPU 0
    guest_exit(0, CAUSE_ECALL_VS, 64'd0);          // SBI send-IPI hypercall
    husuipi(0, 16'd1, f);
    check(!f && uipi_pending[1], "UIPI delivered to core 1 one cycle later");
    check(!uipi_pending[2] && !uipi_pending[4] && !uipi_pending[0], "only core 1 got it");
    take_uipi(1);
    wr(0, CSR_HU_VPC, pc[0]); huret(0);
    wr(1, CSR_HU_VITR, 64'd2);                      // inject a virtual software interrupt
    huret(1);
    check(vintr_valid[1] && vintr_num[1] == 2, "core 1 guest sees the virtual interrupt");
    n_vintr += int'(vintr_valid[1]);
    @(negedge clk); vintr_ack[1] = vintr_valid[1]; @(negedge clk); vintr_ack[1] = 0;
    check(!vintr_valid[1], "acknowledged");
    guest_exit(1, CAUSE_ECALL_VS, 64'd0);           // completion IPI back
    husuipi(1, 16'd0, f);
    check(!f && uipi_pending[0], "answer delivered to core 0");
    take_uipi(0);
    huret(1);
    wr(0, CSR_HU_VITR, 64'd2); huret(0);
    n_vintr += int'(vintr_valid[0]);
    @(negedge clk); vintr_ack[0] = vintr_valid[0]; @(negedge clk); vintr_ack[0] = 0;

    // ---- VM B may not reach VM A's vCPUs, nor a vCPU nobody runs
    guest_exit(4, CAUSE_VIRT_INSN, 64'd0);          // WFI
    husuipi(4, 16'd3, f);                            // vCPU 3 exists only in VM A
    check(f && mode[4] == MODE_HS && uipi_pending == '0, "cross-VM UIPI refused");
    sret(4, MODE_HU);
    husuipi(4, 16'd9, f);
    check(f && uipi_pending == '0, "UIPI to unknown vCPU refused");
    sret(4, MODE_HU);
    husuipi(4, 16'd1, f);                            // own VM's vCPU 1 on core 5
    check(!f && uipi_pending == 8'b0010_0000, "UIPI within VM B");
    take_uipi(5);
    huret(4);
    huret(5);

    // ---- a VM A guest reaches into VM B's memory
    cyc(2, '0, nop(2), '{valid: 1'b1, addr: 56'h3_0000_0040, size_log2: 3,
                         acc: ACC_WRITE, stage2: 1'b1});
    check(s_pmcf && s_trap.hs_trap && s_trap.hs_cause == 64'd7 && mode[2] == MODE_HS,
          "range fault to host kernel");
    n_pmc_fault += int'(s_pmcf);
    sret(2, MODE_VS);

    // ---- timer interrupt on core 3: context switch by the host kernel
    begin
      core_evt_t e;
      e = nop(3); e.hs_irq = 1; e.hs_irq_cause = 6'd5;
      cyc(3, '0, e, '0);
      check(mode[3] == MODE_HS && s_trap.hs_cause == 64'h8000_0000_0000_0005,
            "timer interrupt to HS");
    end
    rd(3, CSR_HU_VPC, saved_vpc);  rd(3, CSR_HU_EHB, saved_ehb);
    rd(3, CSR_HU_VCPUID, saved_vcpuid); rd(3, CSR_HU_VITR, saved_vitr);
    wr(3, CSR_H_ENABLE, 0);                            // another process runs
    wr(3, CSR_HU_VCPUID, 64'hFFFF);
    sret(3, MODE_HU);
    cyc(3, '{valid: 1'b1, addr: CSR_HU_ER, we: 1'b1, wdata: '0}, nop(3), '0);
    check(s_csr.illegal && mode[3] == MODE_HS, "DV-Ext off for the other process");
    n_ctx_switch++;
    wr(3, CSR_H_ENABLE, 1);                            // switch back, restore
    wr(3, CSR_HU_VPC, saved_vpc); wr(3, CSR_HU_EHB, saved_ehb);
    wr(3, CSR_HU_VCPUID, saved_vcpuid); wr(3, CSR_HU_VITR, saved_vitr);
    sret(3, MODE_VS);
    guest_exit(3, CAUSE_VIRT_INSN, 64'd0);
    rd(3, CSR_HU_VCPUID, d);
    check(d == 64'd3, "VCPUID survived the switch");
    husuipi(3, 16'd2, f);
    check(!f && uipi_pending[2] && mode[2] == MODE_VS, "vCPU 2 gets UIPI");
    take_uipi(2);

    // ---- every mechanism happened
    check(n_deleg_s2pf > 0, "delegated stage-2 page faults");
    check(n_deleg_wfi > 0, "delegated WFI exits");
    check(n_deleg_hcall > 0, "delegated hypercalls");
    check(n_huret > 0, "HURET");
    check(n_hs_trap > 0, "traps to the host kernel");
    check(n_uipi_sent > 0 && n_uipi_exit > 0, "UIPIs delivered and taken");
    check(n_uipi_fault >= 2, "refused UIPIs");
    check(n_pmc_fault > 0, "range-check faults");
    check(n_vintr >= 2, "virtual interrupts injected");
    check(n_ctx_switch > 0, "context switch");
    $display("mechanisms: s2pf=%0d wfi=%0d hcall=%0d huret=%0d hs_trap=%0d uipi=%0d/%0d uipi_fault=%0d pmc_fault=%0d vintr=%0d ctx=%0d",
             n_deleg_s2pf, n_deleg_wfi, n_deleg_hcall, n_huret, n_hs_trap, n_uipi_sent,
             n_uipi_exit, n_uipi_fault, n_pmc_fault, n_vintr, n_ctx_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
