// dvext_csr -- the DV-Ext register file of one core.
//
// Holds the six data-plane registers the user-level hypervisor uses at run
// time and the three control-plane registers only the host kernel may touch:
//
//   hu_er      VM exit reason            (written by hardware on a delegated exit)
//   hu_einfo   extra exit information    (e.g. faulting guest physical address)
//   hu_vpc     PC of the exited vCPU     (HURET resumes there)
//   hu_ehb     base of the HU-mode VM-exit handler
//   hu_vitr    virtual interrupt number to present to the guest, 0 = none
//   hu_vcpuid  vCPU currently run by this core (used by UIPI delivery)
//   h_enable   turns DV-Ext on for the running process
//   h_deleg    one bit per exception cause: hand that VM exit to HU-mode
//   h_vmid     VM currently run by this core (used by UIPI delivery)
//
// Access rule: HS-mode may read and write every register (the host kernel
// saves and restores them on a context switch); HU-mode may access the hu_*
// registers only while h_enable is 1; guest modes may access none.  A
// forbidden access returns rsp.illegal, which the core turns into an
// illegal-instruction trap to HS-mode.  A write whose instruction traps for
// another reason in the same cycle (kill) is dropped.  Addresses outside DV-Ext return
// rsp.hit = 0 and are left to the core's own CSR file.
//
// The range registers of the physical-memory checker are reached through an
// indirect window (h_pmcsel selects a region; h_pmcstart, h_pmcend, h_pmccfg
// read and write its fields).  The window is this implementation's choice; the
// published design only says the host kernel writes the start and end of a
// region and its V bit.
//
// Timing: reads are combinational in the cycle of the request; writes, and
// the hardware update on a delegated VM exit (exit_we), take effect at the
// next rising clock edge.  A hardware update wins over a software write in the
// same cycle (the instruction is being trapped).  All registers reset to 0.
module dvext_csr
  import dvext_pkg::*;
#(
  parameter int unsigned NREGIONS = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  mode_e                   mode,
  // CSR instruction port
  input  csr_req_t                req,
  output csr_rsp_t                rsp,
  input  logic                    kill,      // instruction trapped: drop its write
  // hardware update on a VM exit delegated to HU-mode
  input  logic                    exit_we,
  input  logic [XLEN-1:0]         exit_er,
  input  logic [XLEN-1:0]         exit_einfo,
  input  logic [XLEN-1:0]         exit_vpc,
  // guest accepted the virtual interrupt in hu_vitr
  input  logic                    vitr_clr,
  // register values used by the rest of DV-Ext
  output logic                    h_enable,
  output logic [XLEN-1:0]         h_deleg,
  output logic [VMID_W-1:0]       h_vmid,
  output logic [XLEN-1:0]         hu_ehb,
  output logic [XLEN-1:0]         hu_vpc,
  output logic [5:0]              hu_vitr,
  output logic [VCPUID_W-1:0]     hu_vcpuid,
  // window onto the range-checker registers
  output logic                    pmc_we,
  output logic [$clog2(NREGIONS)-1:0] pmc_idx,
  output logic [1:0]              pmc_field,   // 0 start, 1 end, 2 attributes
  output logic [XLEN-1:0]         pmc_wdata,
  input  logic [XLEN-1:0]         pmc_rdata
);
  localparam int unsigned IW = $clog2(NREGIONS);

  logic [XLEN-1:0] hu_er_q, hu_einfo_q;
  logic [IW-1:0]   pmcsel_q;

  logic is_hu_reg, is_h_reg, allowed, wr;

  always_comb begin
    unique case (req.addr)
      CSR_HU_EHB, CSR_HU_VPC, CSR_HU_ER, CSR_HU_EINFO, CSR_HU_VITR, CSR_HU_VCPUID:
        {is_hu_reg, is_h_reg} = 2'b10;
      CSR_H_ENABLE, CSR_H_DELEG, CSR_H_VMID, CSR_H_PMCSEL, CSR_H_PMCSTART,
      CSR_H_PMCEND, CSR_H_PMCCFG:
        {is_hu_reg, is_h_reg} = 2'b01;
      default:
        {is_hu_reg, is_h_reg} = 2'b00;
    endcase
    allowed = (mode == MODE_HS) || (is_hu_reg && mode == MODE_HU && h_enable);
    rsp.hit     = req.valid && (is_hu_reg || is_h_reg);
    rsp.illegal = rsp.hit && !allowed;
    wr          = rsp.hit && allowed && req.we && !kill;
  end

  // read mux
  always_comb begin
    rsp.rdata = '0;
    if (rsp.hit && allowed) begin
      unique case (req.addr)
        CSR_HU_EHB:     rsp.rdata = hu_ehb;
        CSR_HU_VPC:     rsp.rdata = hu_vpc;
        CSR_HU_ER:      rsp.rdata = hu_er_q;
        CSR_HU_EINFO:   rsp.rdata = hu_einfo_q;
        CSR_HU_VITR:    rsp.rdata = XLEN'(hu_vitr);
        CSR_HU_VCPUID:  rsp.rdata = XLEN'(hu_vcpuid);
        CSR_H_ENABLE:   rsp.rdata = XLEN'(h_enable);
        CSR_H_DELEG:    rsp.rdata = h_deleg;
        CSR_H_VMID:     rsp.rdata = XLEN'(h_vmid);
        CSR_H_PMCSEL:   rsp.rdata = XLEN'(pmcsel_q);
        CSR_H_PMCSTART, CSR_H_PMCEND, CSR_H_PMCCFG: rsp.rdata = pmc_rdata;
        default:        rsp.rdata = '0;
      endcase
    end
  end

  // range-register window
  always_comb begin
    pmc_idx   = pmcsel_q;
    pmc_wdata = req.wdata;
    unique case (req.addr)
      CSR_H_PMCSTART: pmc_field = 2'd0;
      CSR_H_PMCEND:   pmc_field = 2'd1;
      default:        pmc_field = 2'd2;
    endcase
    pmc_we = wr && (req.addr == CSR_H_PMCSTART || req.addr == CSR_H_PMCEND ||
                    req.addr == CSR_H_PMCCFG);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hu_er_q    <= '0;
      hu_einfo_q <= '0;
      hu_vpc     <= '0;
      hu_ehb     <= '0;
      hu_vitr    <= '0;
      hu_vcpuid  <= '0;
      h_enable   <= 1'b0;
      h_deleg    <= '0;
      h_vmid     <= '0;
      pmcsel_q   <= '0;
    end else begin
      if (wr) begin
        unique case (req.addr)
          CSR_HU_EHB:    hu_ehb     <= {req.wdata[XLEN-1:2], 2'b00};
          CSR_HU_VPC:    hu_vpc     <= {req.wdata[XLEN-1:1], 1'b0};
          CSR_HU_ER:     hu_er_q    <= req.wdata;
          CSR_HU_EINFO:  hu_einfo_q <= req.wdata;
          CSR_HU_VITR:   hu_vitr    <= req.wdata[5:0];
          CSR_HU_VCPUID: hu_vcpuid  <= req.wdata[VCPUID_W-1:0];
          CSR_H_ENABLE:  h_enable   <= req.wdata[0];
          CSR_H_DELEG:   h_deleg    <= req.wdata & DELEG_MASK;
          CSR_H_VMID:    h_vmid     <= req.wdata[VMID_W-1:0];
          CSR_H_PMCSEL:  pmcsel_q   <= req.wdata[IW-1:0];
          default: ;
        endcase
      end
      if (vitr_clr) hu_vitr <= '0;
      if (exit_we) begin
        hu_er_q    <= exit_er;
        hu_einfo_q <= exit_einfo;
        hu_vpc     <= exit_vpc;
      end
    end
  end

endmodule
