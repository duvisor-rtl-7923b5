// tb_uipi_router -- self-checking test of UIPI delivery.
//
// Directed part: core 0 runs vCPU 0 of VM 0 and sends to vCPU 1, which core
// 1 runs: core 1 receives it.  A target no core runs, a target that runs in
// another VM, and a receiver with DV-Ext disabled all give a fault to the
// sender and deliver nothing.  Random part: random VM/vCPU placements on
// eight cores and random simultaneous sends compared with a reference
// model written here.
module tb_uipi_router;
  import dvext_pkg::*;

  localparam int unsigned NCORES = 8;

  logic [NCORES-1:0] en, send, send_fault, deliver;
  logic [NCORES-1:0][VMID_W-1:0] vmid;
  logic [NCORES-1:0][VCPUID_W-1:0] vcpuid, target;

  uipi_router dut (.*);

  int checks = 0, failures = 0;
  int n_deliver = 0, n_fault = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic expect_out(input logic [NCORES-1:0] f, input logic [NCORES-1:0] d,
                            input string what);
    #1;
    check(send_fault == f && deliver == d,
          $sformatf("%s: fault=%b deliver=%b, expected %b %b", what, send_fault, deliver, f, d));
    n_deliver += $countones(deliver);
    n_fault   += $countones(send_fault);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = '0; send = '0; vmid = '0; vcpuid = '0; target = '0;
    // cores 0,1: VM 0 vCPU 0/1; cores 2,3: VM 1 vCPU 0/1
    en = 8'b0000_1111;
    vmid[0] = 0; vcpuid[0] = 0;
    vmid[1] = 0; vcpuid[1] = 1;
    vmid[2] = 1; vcpuid[2] = 0;
    vmid[3] = 1; vcpuid[3] = 1;
    expect_out('0, '0, "idle");

    send[0] = 1; target[0] = 1;
    expect_out(8'b0, 8'b0000_0010, "core0 -> vCPU1 of VM0");
    target[0] = 5;
    expect_out(8'b0000_0001, 8'b0, "no core runs vCPU5");
    vmid[1] = 1; vcpuid[1] = 7;   // vCPU1 of VM0 descheduled, another VM's thread runs
    target[0] = 7;
    expect_out(8'b0000_0001, 8'b0, "target in another VM");
    vmid[1] = 0; vcpuid[1] = 1; en[1] = 0;
    target[0] = 1;
    expect_out(8'b0000_0001, 8'b0, "receiver has DV-Ext off");
    en[1] = 1;
    send[2] = 1; target[2] = 1; send[1] = 1; target[1] = 1;   // also a self-send
    expect_out(8'b0, 8'b0000_1010, "three senders");
    send = '0;
    en[0] = 0; send[0] = 1; target[0] = 1;
    expect_out(8'b0000_0001, 8'b0, "sender with DV-Ext off");
    send = '0;

    for (int t = 0; t < 5000; t++) begin
      logic [NCORES-1:0] ef, ed;
      for (int c = 0; c < NCORES; c++) begin
        en[c] = ($urandom_range(0, 7) != 0);
        vmid[c] = VMID_W'($urandom_range(0, 2));
        vcpuid[c] = VCPUID_W'($urandom_range(0, 3));
        send[c] = ($urandom_range(0, 3) == 0);
        target[c] = VCPUID_W'($urandom_range(0, 4));
      end
      ef = '0; ed = '0;
      for (int i = 0; i < NCORES; i++) begin
        bit any;
        any = 0;
        if (send[i])
          for (int j = 0; j < NCORES; j++)
            if (en[i] && en[j] && vmid[j] == vmid[i] && vcpuid[j] == target[i]) begin
              ed[j] = 1; any = 1;
            end
        ef[i] = send[i] && !any;
      end
      expect_out(ef, ed, $sformatf("random %0d", t));
    end
    check(n_deliver > 1000 && n_fault > 1000, "both outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
