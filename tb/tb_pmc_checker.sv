// tb_pmc_checker -- self-checking test of the range checker with the V bit.
//
// Directed part: the scenario of a user-level hypervisor whose VM may reach
// only one host-physical region (V = 1): guest accesses inside it pass,
// guest accesses outside it and accesses straddling its end fail, the
// host's own accesses outside it pass, a V = 0 region restricts host and
// guest alike, the lowest-numbered region wins, and the register read-back.
// Random part: all 64 regions programmed with random small ranges, so that
// they overlap, and thousands of random accesses compared with a reference
// model written here as a plain loop.
module tb_pmc_checker;
  import dvext_pkg::*;

  localparam int unsigned NREGIONS = 64;
  localparam int unsigned IW = $clog2(NREGIONS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cfg_we;
  logic [IW-1:0] cfg_idx;
  logic [1:0] cfg_field;
  logic [XLEN-1:0] cfg_wdata, cfg_rdata;
  pmc_req_t req;
  logic fault, hit;
  logic [IW-1:0] hit_idx;

  pmc_checker dut (.*);

  int checks = 0, failures = 0;
  int n_guest_fault = 0, n_guest_pass = 0, n_host_pass = 0;

  // reference copy of the registers
  logic [PA_W-1:0] m_start [NREGIONS];
  logic [PA_W-1:0] m_end   [NREGIONS];
  logic [4:0]      m_attr  [NREGIONS];   // {v, x, w, r, en}

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic set_region(input int i, input logic [PA_W-1:0] s, input logic [PA_W-1:0] e,
                            input logic [4:0] attr);
    @(negedge clk);
    cfg_we = 1; cfg_idx = IW'(i);
    cfg_field = 0; cfg_wdata = XLEN'(s); @(negedge clk);
    cfg_field = 1; cfg_wdata = XLEN'(e); @(negedge clk);
    cfg_field = 2; cfg_wdata = XLEN'(attr) | 64'hFFE0; @(negedge clk);
    cfg_we = 0;
    m_start[i] = s; m_end[i] = e; m_attr[i] = attr;
  endtask

  // reference: expected fault for an access
  function automatic bit model_fault(input logic [PA_W-1:0] a, input int sz, input acc_e acc,
                                     input bit s2);
    longint unsigned first, last;
    first = longint'(a);
    last  = first + longint'(sz) - 1;
    for (int i = 0; i < NREGIONS; i++) begin
      bit applies, perm;
      applies = m_attr[i][0] && (!m_attr[i][4] || s2);
      if (applies && last >= longint'(m_start[i]) && first < longint'(m_end[i])) begin
        perm = (acc == ACC_READ) ? m_attr[i][1] : (acc == ACC_WRITE) ? m_attr[i][2] : m_attr[i][3];
        return !(first >= longint'(m_start[i]) && last < longint'(m_end[i]) && perm);
      end
    end
    return s2;
  endfunction

  task automatic probe(input logic [PA_W-1:0] a, input logic [1:0] szl, input acc_e acc,
                       input bit s2, input bit exp, input string what);
    @(negedge clk);
    req = '{valid: 1'b1, addr: a, size_log2: szl, acc: acc, stage2: s2};
    #1;
    check(fault == exp, $sformatf("%s: addr=%h size=%0d acc=%s stage2=%b fault=%b expected %b",
                                  what, a, 1 << szl, acc.name(), s2, fault, exp));
    if (s2 && exp) n_guest_fault++;
    if (s2 && !exp) n_guest_pass++;
    if (!s2 && !exp) n_host_pass++;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [4:0] RWX_V = 5'b11111, RW_V = 5'b10111, R_NOV = 5'b00011;

  initial begin
    cfg_we = 0; cfg_idx = '0; cfg_field = '0; cfg_wdata = '0; req = '0;
    for (int i = 0; i < NREGIONS; i++) begin m_start[i] = '0; m_end[i] = '0; m_attr[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // nothing programmed: guest accesses fail, host accesses pass
    probe(56'h8000_0000, 3, ACC_READ, 1'b1, 1'b1, "empty, guest");
    probe(56'h8000_0000, 3, ACC_WRITE, 1'b0, 1'b0, "empty, host");
    @(negedge clk); req.valid = 0; #1;
    check(!fault, "no request, no fault");

    // the VM's 512 MiB region at 0x1_0000_0000, V = 1, RWX
    set_region(5, 56'h1_0000_0000, 56'h1_2000_0000, RWX_V);
    probe(56'h1_0000_0000, 3, ACC_READ,  1'b1, 1'b0, "guest first dword");
    probe(56'h1_1FFF_FFF8, 3, ACC_WRITE, 1'b1, 1'b0, "guest last dword");
    probe(56'h1_1FFF_FFFC, 3, ACC_WRITE, 1'b1, 1'b1, "guest straddles end");
    probe(56'h1_2000_0000, 0, ACC_READ,  1'b1, 1'b1, "guest first byte past end");
    probe(56'h0_FFFF_FFFF, 0, ACC_EXEC,  1'b1, 1'b1, "guest byte before start");
    probe(56'h0_8000_0000, 3, ACC_READ,  1'b1, 1'b1, "guest reaches host memory");
    probe(56'h0_8000_0000, 3, ACC_WRITE, 1'b0, 1'b0, "host unaffected by V region");
    probe(56'h1_2000_0000, 2, ACC_READ,  1'b0, 1'b0, "hypervisor unaffected by V region");
    check(hit == 1'b0, "V region does not apply to host access");
    probe(56'h1_0000_1000, 2, ACC_EXEC,  1'b1, 1'b0, "guest fetch");
    check(hit && hit_idx == 5, "hit index 5");

    // a read-only, V = 1 region with higher priority inside it
    set_region(2, 56'h1_0000_0000, 56'h1_0000_1000, RW_V & 5'b10011);
    probe(56'h1_0000_0800, 3, ACC_READ,  1'b1, 1'b0, "priority region read");
    probe(56'h1_0000_0800, 3, ACC_WRITE, 1'b1, 1'b1, "priority region denies write");
    check(hit && hit_idx == 2, "hit index 2");
    probe(56'h1_0000_1000, 3, ACC_WRITE, 1'b1, 1'b0, "past priority region");

    // a V = 0 region applies to host accesses too
    set_region(0, 56'h0_F000_0000, 56'h0_F000_1000, R_NOV);
    probe(56'h0_F000_0010, 2, ACC_WRITE, 1'b0, 1'b1, "V=0 region restricts host");
    probe(56'h0_F000_0010, 2, ACC_READ,  1'b0, 1'b0, "V=0 region allows host read");
    probe(56'h0_F000_0010, 2, ACC_READ,  1'b1, 1'b0, "V=0 region allows guest read");

    // read-back
    @(negedge clk); cfg_idx = 5; cfg_field = 0; #1;
    check(cfg_rdata == 64'h1_0000_0000, "read start");
    cfg_field = 1; #1;
    check(cfg_rdata == 64'h1_2000_0000, "read end");
    cfg_field = 2; #1;
    check(cfg_rdata == 64'h1F, "read attributes");

    // random overlapping regions against the reference model
    for (int i = 0; i < NREGIONS; i++) begin
      logic [PA_W-1:0] s;
      s = PA_W'($urandom_range(0, 4095)) << 4;
      set_region(i, s, s + PA_W'($urandom_range(0, 2048)), 5'($urandom) | 5'b00001 & 5'($urandom));
    end
    for (int t = 0; t < 4000; t++) begin
      logic [PA_W-1:0] a;
      logic [1:0] szl;
      acc_e acc;
      bit s2;
      szl = 2'($urandom);
      a   = PA_W'($urandom_range(0, 70000)) & ~((PA_W'(1) << szl) - 1);
      acc = acc_e'($urandom_range(0, 2));
      s2  = 1'($urandom);
      probe(a, szl, acc, s2, model_fault(a, 1 << szl, acc, s2), "random");
    end

    check(n_guest_fault > 100 && n_guest_pass > 100 && n_host_pass > 100, "coverage of outcomes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
