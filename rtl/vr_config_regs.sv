// vr_config_regs -- the three configuration registers of a virtual region.
//
// When a tenant's design is placed in a VR, the cloud hypervisor writes:
//   address 0  ROUTER_ID  router of the VR this VR sends to      (5 bits)
//   address 1  VR_ID      West (0) or East (1) VR on that router (1 bit)
//   address 2  VI_ID      virtual instance that owns this VR     (10 bits)
// Writes take effect at the next clock edge (cfg_we with cfg_addr and the
// low bits of cfg_wdata); address 3 is ignored. All registers reset to 0.
// The register map and write port are this design's choices.
module vr_config_regs
  import noc_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cfg_we,
  input  cfg_addr_e              cfg_addr,
  input  logic [HDR_W-1:0]       cfg_wdata,
  output logic [ROUTER_ID_W-1:0] dst_router_id,
  output logic [VR_ID_W-1:0]     dst_vr_id,
  output logic [VI_ID_W-1:0]     vi_id
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      dst_router_id <= '0;
      dst_vr_id     <= '0;
      vi_id         <= '0;
    end else if (cfg_we) begin
      case (cfg_addr)
        CFG_ROUTER_ID: dst_router_id <= cfg_wdata[ROUTER_ID_W-1:0];
        CFG_VR_ID:     dst_vr_id     <= cfg_wdata[VR_ID_W-1:0];
        CFG_VI_ID:     vi_id         <= cfg_wdata[VI_ID_W-1:0];
        default: ;
      endcase
    end
  end

endmodule
