// tb_dvext_workloads -- the evaluated VM configurations, run on dvext_top at
// its default size (8 cores, 64 ranges per core).
//
// The application benchmarks themselves are guest software; what they ask of
// DV-Ext is a VM layout and a stream of VM exits.  For each layout this
// testbench drives that stream through the core-side ports and measures the
// hardware's part of each path in clock cycles:
//
//  A. one VM with 1, 2, 4 and 6 vCPUs (one per core) and 512 MiB: every vCPU
//     takes a stage-2 page fault and an MMIO exit, each handled in HU-mode;
//     with two or more vCPUs, a ring of virtual IPIs sent with HUSUIPI.
//     Expected: a delegated exit reaches the handler in 1 cycle, HURET
//     re-enters the guest in 1 cycle, a UIPI exits the target 2 cycles after
//     the HUSUIPI.
//  B. a 4-vCPU VM with 512, 1024, 1536 and 2048 MiB: the last doubleword of
//     the region is reachable from the guest, the first byte past it is
//     fenced, the host is not.
//  C. eight 1-vCPU VMs, one per core: every VM's HUSUIPI to its vCPU 0 reaches
//     only its own core, never another VM's.
module tb_dvext_workloads;
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
  localparam logic [PA_W-1:0] BASE = 56'h2_0000_0000;

  int checks = 0, failures = 0;
  int n_exits = 0, n_mmio = 0, n_uipi = 0, n_fenced = 0, n_isolated = 0;
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

  csr_rsp_t s_csr; trap_rsp_t s_trap; logic s_pmcf;
  task automatic cyc(input int c, input csr_req_t r, input core_evt_t e, input pmc_req_t p);
    idle_all();
    csr_req[c] = r; evt[c] = e; pmc_req[c] = p;
    #1;
    s_csr = csr_rsp[c]; s_trap = trap_rsp[c]; s_pmcf = pmc_fault[c];
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
    d = s_csr.rdata;
  endtask

  task automatic reset_system();
    idle_all();
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
  endtask

  // host kernel and vthread bring-up of one vCPU; ends in the guest
  task automatic bring_up(input int c, input int vmid, input int vcpu, input longint bytes);
    core_evt_t e;
    wr(c, CSR_H_ENABLE, 1);
    wr(c, CSR_H_DELEG, (64'd1 << CAUSE_LOAD_GPF) | (64'd1 << CAUSE_STORE_GPF) |
                       (64'd1 << CAUSE_VIRT_INSN) | (64'd1 << CAUSE_ECALL_VS));
    wr(c, CSR_H_VMID, 64'(vmid));
    wr(c, CSR_H_PMCSEL, 64'd0);
    wr(c, CSR_H_PMCSTART, 64'(BASE));
    wr(c, CSR_H_PMCEND, 64'(BASE) + 64'(bytes));
    wr(c, CSR_H_PMCCFG, 64'h1F);
    e = nop(c); e.sret = 1; e.sret_mode = MODE_HU;
    cyc(c, '0, e, '0);
    wr(c, CSR_HU_EHB, EHB);
    wr(c, CSR_HU_VCPUID, 64'(vcpu));
    wr(c, CSR_HU_VPC, 64'h8000_0000);
    huret(c);
  endtask

  // HURET: must be back in the guest one edge later
  task automatic huret(input int c);
    core_evt_t e;
    e = nop(c); e.huret = 1;
    cyc(c, '0, e, '0);
    check(mode[c] == MODE_VS && s_trap.redirect, $sformatf("core %0d HURET in 1 cycle", c));
  endtask

  // guest exit: handler reached (mode HU, pc = hu_ehb) one edge later
  task automatic exit_and_return(input int c, input logic [5:0] cause, input logic [XLEN-1:0] gpa,
                                 input bit skip);
    core_evt_t e;
    logic [XLEN-1:0] d, epc;
    epc = pc[c];
    e = nop(c); e.exc_valid = 1; e.exc_cause = cause; e.exc_tval = gpa;
    cyc(c, '0, e, '0);
    check(mode[c] == MODE_HU && pc[c] == EHB, $sformatf("core %0d exit in 1 cycle", c));
    n_exits++;
    rd(c, CSR_HU_ER, d);    check(d == 64'(cause), "hu_er");
    rd(c, CSR_HU_EINFO, d); check(d == gpa, "hu_einfo");
    rd(c, CSR_HU_VPC, d);   check(d == epc, "hu_vpc");
    if (skip) wr(c, CSR_HU_VPC, epc + 4);    // emulated load: skip it
    huret(c);
    check(pc[c] == (skip ? epc + 4 : epc), $sformatf("core %0d resumes at the right PC", c));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int sizes [4] = '{1, 2, 4, 6};
    static longint mem_mb [4] = '{512, 1024, 1536, 2048};
    for (int c = 0; c < NCORES; c++) begin pc[c] = 64'h1000; hs_tvec[c] = TVEC; end
    vintr_ack = '0;

    // ---------------- A: VMs of 1, 2, 4, 6 vCPUs with 512 MiB
    foreach (sizes[k]) begin
      int n;
      n = sizes[k];
      reset_system();
      for (int c = 0; c < n; c++) bring_up(c, 1, c, 64'd512 << 20);
      for (int c = 0; c < n; c++) begin
        exit_and_return(c, CAUSE_LOAD_GPF, 64'h10_0000 + 64'(c) * 64'h1000, 1'b0);  // S2PF
        exit_and_return(c, CAUSE_LOAD_GPF, 64'h1000_0000, 1'b1);                     // MMIO read
        n_mmio++;
      end
      if (n >= 2) begin
        for (int c = 0; c < n; c++) begin
          int t;
          core_evt_t e;
          bit f;
          t = (c + 1) % n;
          // the IPI hypercall: exit, HUSUIPI, resume
          e = nop(c); e.exc_valid = 1; e.exc_cause = CAUSE_ECALL_VS;
          cyc(c, '0, e, '0);
          e = nop(c); e.husuipi = 1; e.uipi_target = VCPUID_W'(t);
          cyc(c, '0, e, '0);                        // edge 1: pending at target
          f = s_trap.hs_trap;
          check(!f && uipi_pending[t] && mode[t] == MODE_VS,
                $sformatf("VM%0d: UIPI %0d->%0d pending after 1 cycle", n, c, t));
          @(negedge clk);                            // edge 2: target exits
          check(mode[t] == MODE_HU && !uipi_pending[t],
                $sformatf("VM%0d: vCPU %0d exits 2 cycles after HUSUIPI", n, t));
          n_uipi++;
          wr(t, CSR_HU_VITR, 64'd2);
          huret(t);
          check(vintr_valid[t], "virtual IPI presented");
          @(negedge clk); vintr_ack[t] = vintr_valid[t]; @(negedge clk); vintr_ack[t] = 0;
          huret(c);
        end
      end
      for (int c = n; c < NCORES; c++) check(mode[c] == MODE_HS, "unused cores stay with the host");
    end

    // ---------------- B: 4-vCPU VM with 512..2048 MiB
    foreach (mem_mb[k]) begin
      logic [PA_W-1:0] lim;
      reset_system();
      for (int c = 0; c < 4; c++) bring_up(c, 3, c, mem_mb[k] << 20);
      lim = BASE + PA_W'(mem_mb[k] << 20);
      for (int c = 0; c < 4; c++) begin
        cyc(c, '0, nop(c), '{valid: 1'b1, addr: lim - 8, size_log2: 3, acc: ACC_WRITE, stage2: 1'b1});
        check(!s_pmcf && mode[c] == MODE_VS, $sformatf("%0d MiB: last dword reachable", mem_mb[k]));
        cyc(c, '0, nop(c), '{valid: 1'b1, addr: lim, size_log2: 0, acc: ACC_READ, stage2: 1'b1});
        check(s_pmcf && mode[c] == MODE_HS, $sformatf("%0d MiB: byte past end fenced", mem_mb[k]));
        n_fenced++;
        cyc(c, '0, nop(c), '{valid: 1'b1, addr: lim, size_log2: 3, acc: ACC_READ, stage2: 1'b0});
        check(!s_pmcf, "host not fenced");
      end
    end

    // ---------------- C: eight 1-vCPU VMs
    reset_system();
    for (int c = 0; c < NCORES; c++) bring_up(c, c + 1, 0, 64'd512 << 20);
    for (int c = 0; c < NCORES; c++) begin
      core_evt_t e;
      e = nop(c); e.exc_valid = 1; e.exc_cause = CAUSE_ECALL_VS;
      cyc(c, '0, e, '0);
      e = nop(c); e.husuipi = 1; e.uipi_target = '0;
      cyc(c, '0, e, '0);
      check(!s_trap.hs_trap && uipi_pending == (NCORES'(1) << c),
            $sformatf("VM %0d: UIPI stays in its VM", c + 1));
      n_isolated += int'(uipi_pending == (NCORES'(1) << c));
      huret(c);                                   // the guest resumes ...
      check(mode[c] == MODE_VS, "resumed");
      @(negedge clk);                             // ... and the UIPI exits it
      check(mode[c] == MODE_HU, "self UIPI taken");
      huret(c);
    end

    check(n_exits > 0 && n_mmio > 0 && n_uipi == 2 + 4 + 6 && n_fenced == 16 &&
          n_isolated == NCORES, "all workloads ran");
    $display("workloads: exits=%0d mmio=%0d uipi=%0d fenced=%0d isolated=%0d",
             n_exits, n_mmio, n_uipi, n_fenced, n_isolated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
