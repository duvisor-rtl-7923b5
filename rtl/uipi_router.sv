// uipi_router -- delivery of user-level inter-processor interrupts (UIPIs).
//
// A user-level hypervisor thread wakes a vCPU that runs on another core by
// executing HUSUIPI with the target's VCPUID as operand.  It cannot name a
// physical core.  Each core publishes the VM it runs (h_vmid, set by the host
// kernel), the vCPU it runs (hu_vcpuid, set by the hypervisor thread before
// it resumes the vCPU) and whether DV-Ext is enabled on it.  The router
// delivers a UIPI from core i to every enabled core j with
//     vmid[j] == vmid[i]  and  vcpuid[j] == target[i];
// if there is no such core, send_fault[i] is raised and the sending
// instruction traps to the host kernel.  Several senders may hit the same
// receiver in one cycle; the receiver sees one UIPI.  A sender may also
// target the vCPU on its own core.
//
// The VMID/VCPUID check and the fault to the host kernel follow the
// published design.  Delivering to every matching core (normally exactly one)
// and the combinational single-cycle match are this implementation's
// choices.
//
// Timing: send_fault and deliver are combinational in the cycle of send;
// the receiving core latches deliver into its pending bit at the next edge.
module uipi_router
  import dvext_pkg::*;
#(
  parameter int unsigned NCORES = 8
) (
  input  logic [NCORES-1:0]               en,
  input  logic [NCORES-1:0][VMID_W-1:0]   vmid,
  input  logic [NCORES-1:0][VCPUID_W-1:0] vcpuid,
  input  logic [NCORES-1:0]               send,
  input  logic [NCORES-1:0][VCPUID_W-1:0] target,
  output logic [NCORES-1:0]               send_fault,
  output logic [NCORES-1:0]               deliver
);
  // match[i][j]: a UIPI sent by core i is accepted by core j
  logic [NCORES-1:0][NCORES-1:0] match;

  always_comb begin
    for (int i = 0; i < NCORES; i++)
      for (int j = 0; j < NCORES; j++)
        match[i][j] = send[i] && en[i] && en[j] &&
                      (vmid[j] == vmid[i]) && (vcpuid[j] == target[i]);
  end

  always_comb begin
    deliver = '0;
    for (int i = 0; i < NCORES; i++) begin
      send_fault[i] = send[i] && (match[i] == '0);
      deliver       = deliver | match[i];
    end
  end

  // a UIPI never reaches a core that has DV-Ext disabled
  always_comb assert ((deliver & ~en) == '0);
endmodule
