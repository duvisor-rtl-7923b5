// dvext_hart -- the DV-Ext logic of one core.
//
// Joins the register file (dvext_csr), the mode controller and VM-exit
// router (dvext_trap) and the physical-memory checker (pmc_checker), and
// presents one core-side interface:
//
//  * csr_req/csr_rsp: CSR instructions.  A forbidden DV-Ext access is turned
//    into an illegal-instruction exception here and routed like any other.
//  * evt/trap_rsp:   the committing instruction's exception, HURET, HUSUIPI,
//    SRET and interrupt events, and the resulting redirect or trap.
//  * pmc_req/pmc_fault: the host physical address of each memory access,
//    with a flag saying whether it came from stage-2 translation; pmc_fault
//    blocks the access and traps to HS-mode.
//  * vintr_*: the virtual interrupt the hypervisor placed in hu_vitr, shown
//    to the guest while the core runs a guest mode; vintr_ack clears it and
//    may only be raised while vintr_valid is (checked by an assertion).
//  * uipi_*: this core's port on the UIPI router.
//
// The core pipeline, its own CSR file (stvec, sepc, scause, ...) and the
// two-stage MMU are outside this block; their signals are the ports.  The
// split into these sub-blocks is this implementation's.
//
// Timing: every decision is combinational in the cycle the core presents
// the event; state changes at the next rising edge.
module dvext_hart
  import dvext_pkg::*;
#(
  parameter int unsigned NREGIONS = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // core side
  input  csr_req_t              csr_req,
  output csr_rsp_t              csr_rsp,
  input  core_evt_t             evt,
  input  logic [XLEN-1:0]       hs_tvec,
  output trap_rsp_t             trap_rsp,
  output mode_e                 mode,
  input  pmc_req_t              pmc_req,
  output logic                  pmc_fault,
  output logic                  vintr_valid,
  output logic [5:0]            vintr_num,
  input  logic                  vintr_ack,
  // UIPI router side
  output logic                  uipi_en,
  output logic [VMID_W-1:0]     uipi_vmid,
  output logic [VCPUID_W-1:0]   uipi_vcpuid,
  output logic                  uipi_send,
  output logic [VCPUID_W-1:0]   uipi_target,
  input  logic                  uipi_send_fault,
  input  logic                  uipi_deliver,
  output logic                  uipi_pending
);
  localparam int unsigned IW = $clog2(NREGIONS);

  logic                h_enable;
  logic [XLEN-1:0]     h_deleg, hu_ehb, hu_vpc;
  logic [5:0]          hu_vitr;
  logic                exit_we;
  logic [XLEN-1:0]     exit_er, exit_einfo, exit_vpc;
  logic                cfg_we;
  logic [IW-1:0]       cfg_idx;
  logic [1:0]          cfg_field;
  logic [XLEN-1:0]     cfg_wdata, cfg_rdata;
  logic                pmc_hit;
  logic [IW-1:0]       pmc_hit_idx;
  core_evt_t           evt_x;
  logic                kill;

  dvext_csr #(.NREGIONS(NREGIONS)) u_csr (
    .clk, .rst_n, .mode,
    .req        (csr_req),
    .rsp        (csr_rsp),
    .kill,
    .exit_we, .exit_er, .exit_einfo, .exit_vpc,
    .vitr_clr   (vintr_ack),
    .h_enable, .h_deleg,
    .h_vmid     (uipi_vmid),
    .hu_ehb, .hu_vpc, .hu_vitr,
    .hu_vcpuid  (uipi_vcpuid),
    .pmc_we     (cfg_we),
    .pmc_idx    (cfg_idx),
    .pmc_field  (cfg_field),
    .pmc_wdata  (cfg_wdata),
    .pmc_rdata  (cfg_rdata)
  );

  pmc_checker #(.NREGIONS(NREGIONS)) u_pmc (
    .clk, .rst_n,
    .cfg_we, .cfg_idx, .cfg_field, .cfg_wdata, .cfg_rdata,
    .req     (pmc_req),
    .fault   (pmc_fault),
    .hit     (pmc_hit),
    .hit_idx (pmc_hit_idx)
  );

  // a forbidden DV-Ext CSR access is an illegal instruction
  always_comb begin
    evt_x = evt;
    if (csr_rsp.illegal && !evt.exc_valid) begin
      evt_x.exc_valid = 1'b1;
      evt_x.exc_cause = CAUSE_ILLEGAL_INSN;
      evt_x.exc_tval  = '0;
    end
  end

  dvext_trap u_trap (
    .clk, .rst_n,
    .evt       (evt_x),
    .pmc_fault,
    .pmc_acc   (pmc_req.acc),
    .pmc_addr  (pmc_req.addr),
    .h_enable, .h_deleg, .hu_ehb, .hu_vpc, .hs_tvec,
    .uipi_send, .uipi_send_fault, .uipi_deliver, .uipi_pending,
    .rsp       (trap_rsp),
    .mode,
    .exit_we, .exit_er, .exit_einfo, .exit_vpc
  );

  assign kill        = trap_rsp.hs_trap || exit_we;
  assign uipi_en     = h_enable;
  assign uipi_target = evt.uipi_target;
  assign vintr_valid = is_vmode(mode) && (hu_vitr != '0);
  assign vintr_num   = hu_vitr;

  // the core acknowledges only a virtual interrupt it was shown
  always_ff @(posedge clk) begin
    assert (!vintr_ack || vintr_valid) else $error("vintr_ack without vintr_valid");
  end

  // the region that allowed or refused the access is for debug visibility
  logic unused_ok;
  assign unused_ok = &{1'b0, pmc_hit, pmc_hit_idx};
endmodule
