// dvext_top -- DV-Ext for a multi-core SoC.
//
// One dvext_hart per core and the UIPI router that connects them.  Each
// core keeps its own DV-Ext registers, privilege mode and 64 physical
// memory ranges; the only shared logic is UIPI delivery, which matches a
// sender's target VCPUID and VMID against what every core currently runs.
// The default of eight cores is the core count of the evaluation boards.
//
// All ports are per-core arrays of the bundles of dvext_pkg and connect to
// the cores' pipelines, CSR files and MMUs, which are not part of this
// design.  Timing is that of dvext_hart: decisions in the cycle of the event,
// state at the next edge; a UIPI becomes pending in the receiver one cycle
// after the HUSUIPI that sent it.
module dvext_top
  import dvext_pkg::*;
#(
  parameter int unsigned NCORES   = 8,
  parameter int unsigned NREGIONS = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  csr_req_t                csr_req     [NCORES],
  output csr_rsp_t                csr_rsp     [NCORES],
  input  core_evt_t               evt         [NCORES],
  input  logic [XLEN-1:0]         hs_tvec     [NCORES],
  output trap_rsp_t               trap_rsp    [NCORES],
  output mode_e                   mode        [NCORES],
  input  pmc_req_t                pmc_req     [NCORES],
  output logic [NCORES-1:0]       pmc_fault,
  output logic [NCORES-1:0]       vintr_valid,
  output logic [5:0]              vintr_num   [NCORES],
  input  logic [NCORES-1:0]       vintr_ack,
  output logic [NCORES-1:0]       uipi_pending
);
  logic [NCORES-1:0]               u_en, u_send, u_fault, u_deliver;
  logic [NCORES-1:0][VMID_W-1:0]   u_vmid;
  logic [NCORES-1:0][VCPUID_W-1:0] u_vcpuid, u_target;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    dvext_hart #(.NREGIONS(NREGIONS)) u_hart (
      .clk, .rst_n,
      .csr_req         (csr_req[c]),
      .csr_rsp         (csr_rsp[c]),
      .evt             (evt[c]),
      .hs_tvec         (hs_tvec[c]),
      .trap_rsp        (trap_rsp[c]),
      .mode            (mode[c]),
      .pmc_req         (pmc_req[c]),
      .pmc_fault       (pmc_fault[c]),
      .vintr_valid     (vintr_valid[c]),
      .vintr_num       (vintr_num[c]),
      .vintr_ack       (vintr_ack[c]),
      .uipi_en         (u_en[c]),
      .uipi_vmid       (u_vmid[c]),
      .uipi_vcpuid     (u_vcpuid[c]),
      .uipi_send       (u_send[c]),
      .uipi_target     (u_target[c]),
      .uipi_send_fault (u_fault[c]),
      .uipi_deliver    (u_deliver[c]),
      .uipi_pending    (uipi_pending[c])
    );
  end

  uipi_router #(.NCORES(NCORES)) u_router (
    .en         (u_en),
    .vmid       (u_vmid),
    .vcpuid     (u_vcpuid),
    .send       (u_send),
    .target     (u_target),
    .send_fault (u_fault),
    .deliver    (u_deliver)
  );
endmodule
