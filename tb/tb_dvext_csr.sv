// tb_dvext_csr -- self-checking test of the DV-Ext register file.
//
// Checks, against values computed here: reset values; read/write of every
// register from HS-mode, including the write masks (h_deleg keeps only the
// delegable causes, hu_ehb is 4-byte aligned, hu_vitr keeps 6 bits); that
// HU-mode reaches the hu_* registers only with h_enable = 1 and never the h_*
// registers; that guest modes reach none; that unknown addresses are not
// claimed; the hardware exit-update port; the kill input; hu_vitr clearing;
// and the range-register window.
module tb_dvext_csr;
  import dvext_pkg::*;

  localparam int unsigned NREGIONS = 64;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e mode;
  csr_req_t req;
  csr_rsp_t rsp;
  logic kill, exit_we, vitr_clr;
  logic [XLEN-1:0] exit_er, exit_einfo, exit_vpc;
  logic h_enable;
  logic [XLEN-1:0] h_deleg, hu_ehb, hu_vpc;
  logic [VMID_W-1:0] h_vmid;
  logic [5:0] hu_vitr;
  logic [VCPUID_W-1:0] hu_vcpuid;
  logic pmc_we;
  logic [$clog2(NREGIONS)-1:0] pmc_idx;
  logic [1:0] pmc_field;
  logic [XLEN-1:0] pmc_wdata, pmc_rdata;

  dvext_csr dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one CSR access: drive, look at the response, clock it in
  task automatic access(input logic [11:0] a, input logic we, input logic [XLEN-1:0] d,
                        output csr_rsp_t r);
    @(negedge clk);
    req = '{valid: 1'b1, addr: a, we: we, wdata: d};
    #1 r = rsp;
    @(negedge clk);
    req = '0;
  endtask

  task automatic wr_ok(input logic [11:0] a, input logic [XLEN-1:0] d);
    csr_rsp_t r;
    access(a, 1'b1, d, r);
    check(r.hit && !r.illegal, $sformatf("write %h accepted in mode %s", a, mode.name()));
  endtask

  task automatic rd_expect(input logic [11:0] a, input logic [XLEN-1:0] exp);
    csr_rsp_t r;
    access(a, 1'b0, '0, r);
    check(r.hit && !r.illegal && r.rdata == exp,
          $sformatf("read %h = %h, expected %h (mode %s)", a, r.rdata, exp, mode.name()));
  endtask

  task automatic expect_illegal(input logic [11:0] a, input logic we);
    csr_rsp_t r;
    access(a, we, '1, r);
    check(r.hit && r.illegal && r.rdata == '0,
          $sformatf("access %h must be illegal in mode %s", a, mode.name()));
  endtask

  localparam logic [11:0] HU_REGS [6] = '{CSR_HU_EHB, CSR_HU_VPC, CSR_HU_ER,
                                         CSR_HU_EINFO, CSR_HU_VITR, CSR_HU_VCPUID};
  localparam logic [11:0] H_REGS [7]  = '{CSR_H_ENABLE, CSR_H_DELEG, CSR_H_VMID,
                                         CSR_H_PMCSEL, CSR_H_PMCSTART, CSR_H_PMCEND,
                                         CSR_H_PMCCFG};

  // simple model of the range registers behind the window
  logic [XLEN-1:0] pmc_model [NREGIONS][3];
  always_ff @(posedge clk) if (pmc_we) pmc_model[pmc_idx][pmc_field] <= pmc_wdata;
  assign pmc_rdata = pmc_model[pmc_idx][pmc_field];

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    csr_rsp_t r;
    logic [XLEN-1:0] v;
    for (int i = 0; i < NREGIONS; i++) for (int f = 0; f < 3; f++) pmc_model[i][f] = '0;
    mode = MODE_HS; req = '0; kill = 0; exit_we = 0; vitr_clr = 0;
    exit_er = '0; exit_einfo = '0; exit_vpc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // reset values
    check(h_enable == 0 && h_deleg == 0 && h_vmid == 0 && hu_ehb == 0 &&
          hu_vpc == 0 && hu_vitr == 0 && hu_vcpuid == 0, "reset values");

    // HS-mode: every register, with write masks
    wr_ok(CSR_H_DELEG, '1);
    rd_expect(CSR_H_DELEG, 64'h0000_0000_00F0_0400);   // causes 10, 20-23
    check(h_deleg == 64'h0000_0000_00F0_0400, "h_deleg output");
    wr_ok(CSR_H_VMID, 64'hFFFF_0000_0000_2ABC);
    rd_expect(CSR_H_VMID, 64'h2ABC);                   // 14 bits
    check(h_vmid == 14'h2ABC, "h_vmid output");
    wr_ok(CSR_HU_EHB, 64'h0000_0040_1234_5677);
    rd_expect(CSR_HU_EHB, 64'h0000_0040_1234_5674);
    check(hu_ehb == 64'h0000_0040_1234_5674, "hu_ehb output");
    wr_ok(CSR_HU_VPC, 64'h8000_0003);
    rd_expect(CSR_HU_VPC, 64'h8000_0002);
    wr_ok(CSR_HU_ER, 64'd21);
    rd_expect(CSR_HU_ER, 64'd21);
    wr_ok(CSR_HU_EINFO, 64'hDEAD_BEEF_0000_1000);
    rd_expect(CSR_HU_EINFO, 64'hDEAD_BEEF_0000_1000);
    wr_ok(CSR_HU_VITR, 64'hFFC6);
    rd_expect(CSR_HU_VITR, 64'h6);
    check(hu_vitr == 6'd6, "hu_vitr output");
    wr_ok(CSR_HU_VCPUID, 64'h1_0003);
    rd_expect(CSR_HU_VCPUID, 64'h3);
    check(hu_vcpuid == 16'd3, "hu_vcpuid output");

    // HU-mode without h_enable: nothing
    mode = MODE_HU;
    foreach (HU_REGS[i]) expect_illegal(HU_REGS[i], 1'b1);
    foreach (H_REGS[i])  expect_illegal(H_REGS[i], 1'b1);
    mode = MODE_HS;
    rd_expect(CSR_HU_VCPUID, 64'h3);                   // refused writes left it alone
    rd_expect(CSR_H_DELEG, 64'h0000_0000_00F0_0400);

    // HS turns DV-Ext on
    wr_ok(CSR_H_ENABLE, 64'h3);
    rd_expect(CSR_H_ENABLE, 64'h1);
    check(h_enable, "h_enable output");

    // HU-mode with h_enable: hu_* yes, h_* no
    mode = MODE_HU;
    rd_expect(CSR_HU_ER, 64'd21);
    wr_ok(CSR_HU_VCPUID, 64'd7);
    rd_expect(CSR_HU_VCPUID, 64'd7);
    wr_ok(CSR_HU_VPC, 64'h9000_0000);
    rd_expect(CSR_HU_VPC, 64'h9000_0000);
    foreach (H_REGS[i]) expect_illegal(H_REGS[i], 1'b1);
    check(h_enable && h_vmid == 14'h2ABC && h_deleg == 64'h00F0_0400,
          "HU writes to h_* ignored");

    // guest modes: nothing
    mode = MODE_VS;
    foreach (HU_REGS[i]) expect_illegal(HU_REGS[i], 1'b0);
    mode = MODE_VU;
    expect_illegal(CSR_HU_ER, 1'b0);
    expect_illegal(CSR_H_ENABLE, 1'b1);
    mode = MODE_HS;
    rd_expect(CSR_H_ENABLE, 64'h1);

    // addresses outside DV-Ext are not claimed
    access(12'h100, 1'b1, '1, r);   // sstatus
    check(!r.hit && !r.illegal, "sstatus not claimed");
    access(12'h044, 1'b0, '0, r);   // uip
    check(!r.hit && !r.illegal, "uip not claimed");
    access(12'h802, 1'b0, '0, r);
    check(!r.hit, "0x802 not claimed");

    // kill drops a write
    @(negedge clk);
    req = '{valid: 1'b1, addr: CSR_HU_VCPUID, we: 1'b1, wdata: 64'd99};
    kill = 1'b1;
    @(negedge clk);
    req = '0; kill = 1'b0;
    rd_expect(CSR_HU_VCPUID, 64'd7);

    // hardware exit update
    @(negedge clk);
    exit_we = 1'b1; exit_er = 64'd23; exit_einfo = 64'h8020_0000; exit_vpc = 64'h8000_1234;
    @(negedge clk);
    exit_we = 1'b0;
    rd_expect(CSR_HU_ER, 64'd23);
    rd_expect(CSR_HU_EINFO, 64'h8020_0000);
    rd_expect(CSR_HU_VPC, 64'h8000_1234);
    check(hu_vpc == 64'h8000_1234, "hu_vpc output after exit");

    // guest acknowledges the virtual interrupt
    check(hu_vitr == 6'd6, "hu_vitr still set");
    @(negedge clk); vitr_clr = 1'b1; @(negedge clk); vitr_clr = 1'b0;
    check(hu_vitr == 6'd0, "hu_vitr cleared by acknowledge");

    // range-register window
    for (int i = 0; i < 4; i++) begin
      int idx;
      idx = (i * 21) % NREGIONS;
      wr_ok(CSR_H_PMCSEL, 64'(idx));
      rd_expect(CSR_H_PMCSEL, 64'(idx));
      v = {$urandom, $urandom};
      wr_ok(CSR_H_PMCSTART, v);
      check(pmc_model[idx][0] == v, $sformatf("start of region %0d written", idx));
      wr_ok(CSR_H_PMCEND, v + 64'h1000);
      wr_ok(CSR_H_PMCCFG, 64'h1F);
      rd_expect(CSR_H_PMCSTART, v);
      rd_expect(CSR_H_PMCEND, v + 64'h1000);
      rd_expect(CSR_H_PMCCFG, 64'h1F);
    end
    mode = MODE_HU;
    expect_illegal(CSR_H_PMCSTART, 1'b1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
