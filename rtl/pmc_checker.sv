// pmc_checker -- physical memory checking (PMC) with the V bit.
//
// Holds NREGIONS range registers, each a start address, an end address
// (first byte past the region) and the attributes en/R/W/X/V, and checks one
// physical access per cycle against them.  The published design extends the
// RISC-V PMP ranges with a V bit so that the host kernel can confine the
// memory a VM reaches through a stage-2 page table that the *user-level*
// hypervisor builds, without confining the host itself:
//
//  * a region with V = 1 applies only to accesses whose HPA was produced by
//    stage-2 translation, or that read/write the stage-2 page table during a
//    walk (req.stage2 = 1); a region with V = 0 applies to every access;
//  * among the regions that apply, the lowest-numbered one that contains any
//    byte of the access decides: the access passes only if all its bytes lie
//    in that region and the region grants the access type;
//  * a stage-2 access that no applicable region contains fails; any other
//    access that no region contains passes (the host kernel and the
//    hypervisor may use all of physical memory).
//
// A failure raises fault, which the trap controller sends to HS-mode as an
// access fault: the host kernel, not the hypervisor, handles it.  The
// start/end form of the ranges and the 64 regions per core follow the
// published design; the lowest-index priority, the exclusive end, the
// default-allow for non-stage-2 accesses and the register port are this
// implementation's choices.
//
// Timing: the check is combinational (fault in the same cycle as req);
// register writes take effect at the next rising edge; reads are
// combinational.  Reset clears all regions (en = 0).
module pmc_checker
  import dvext_pkg::*;
#(
  parameter int unsigned NREGIONS = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // register port (from the DV-Ext register file)
  input  logic                        cfg_we,
  input  logic [$clog2(NREGIONS)-1:0] cfg_idx,
  input  logic [1:0]                  cfg_field,  // 0 start, 1 end, 2 attributes
  input  logic [XLEN-1:0]             cfg_wdata,
  output logic [XLEN-1:0]             cfg_rdata,  // field cfg_field of region cfg_idx
  // access check
  input  pmc_req_t                    req,
  output logic                        fault,
  output logic                        hit,        // some applicable region matched
  output logic [$clog2(NREGIONS)-1:0] hit_idx
);
  localparam int unsigned IW = $clog2(NREGIONS);

  logic [PA_W-1:0] start_q [NREGIONS];
  logic [PA_W-1:0] end_q   [NREGIONS];
  pmc_attr_t       attr_q  [NREGIONS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGIONS; i++) begin
        start_q[i] <= '0;
        end_q[i]   <= '0;
        attr_q[i]  <= '0;
      end
    end else if (cfg_we) begin
      unique case (cfg_field)
        2'd0:    start_q[cfg_idx] <= cfg_wdata[PA_W-1:0];
        2'd1:    end_q[cfg_idx]   <= cfg_wdata[PA_W-1:0];
        default: attr_q[cfg_idx]  <= cfg_wdata[$bits(pmc_attr_t)-1:0];
      endcase
    end
  end

  always_comb begin
    unique case (cfg_field)
      2'd0:    cfg_rdata = XLEN'(start_q[cfg_idx]);
      2'd1:    cfg_rdata = XLEN'(end_q[cfg_idx]);
      default: cfg_rdata = XLEN'(attr_q[cfg_idx]);
    endcase
  end

  // last byte of the access (no wrap: an access never crosses the top of
  // the physical address space)
  logic [PA_W:0] first_b, last_b;
  assign first_b = {1'b0, req.addr};
  assign last_b  = first_b + ((PA_W+1)'(1) << req.size_log2) - (PA_W+1)'(1);

  logic [NREGIONS-1:0] touch, contained;
  always_comb begin
    for (int i = 0; i < NREGIONS; i++) begin
      logic applies;
      applies   = attr_q[i].en && (!attr_q[i].v || req.stage2);
      // some byte of [first_b, last_b] lies in [start, end)
      touch[i]  = applies && (last_b >= {1'b0, start_q[i]}) && (first_b < {1'b0, end_q[i]});
      contained[i] = (first_b >= {1'b0, start_q[i]}) && (last_b < {1'b0, end_q[i]});
    end
  end

  always_comb begin
    logic granted;
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = NREGIONS - 1; i >= 0; i--) begin
      if (touch[i]) begin
        hit     = 1'b1;
        hit_idx = IW'(i);
      end
    end
    unique case (req.acc)
      ACC_WRITE: granted = attr_q[hit_idx].w;
      ACC_EXEC:  granted = attr_q[hit_idx].x;
      default:   granted = attr_q[hit_idx].r;
    endcase
    if (!req.valid)  fault = 1'b0;
    else if (hit)    fault = !(contained[hit_idx] && granted);
    else             fault = req.stage2;
  end
endmodule
