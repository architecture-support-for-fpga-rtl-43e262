// vr_wrapper -- forms outgoing packets of a virtual region.
//
// The tenant's logic only produces payloads. The Wrapper prefixes each one
// with the 16-bit header built from the VR registers {VI_ID, VR_ID,
// ROUTER_ID}, so a tenant can neither forge its VI nor pick a destination
// the hypervisor did not configure. Input and output are AXI4-Stream
// (tdata/tvalid/tready). The output is a full-throughput register stage:
// a payload accepted in cycle t is offered as a packet from cycle t+1, and a
// new payload is accepted every cycle while the consumer keeps up. The
// register stage is this design's choice.
module vr_wrapper
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W = DEFAULT_DATA_W,
  localparam int unsigned FLIT_W = HDR_W + DATA_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [ROUTER_ID_W-1:0] dst_router_id,
  input  logic [VR_ID_W-1:0]     dst_vr_id,
  input  logic [VI_ID_W-1:0]     vi_id,
  // payload from the USER REGION
  input  logic [DATA_W-1:0]      u_tdata,
  input  logic                   u_tvalid,
  output logic                   u_tready,
  // packet to the VR interface
  output logic [FLIT_W-1:0]      m_tdata,
  output logic                   m_tvalid,
  input  logic                   m_tready
);

  hdr_t hdr;

  assign hdr      = '{vi_id: vi_id, vr_id: dst_vr_id, router_id: dst_router_id};
  assign u_tready = !m_tvalid || m_tready;

  always_ff @(posedge clk) begin
    if (!rst_n)        m_tvalid <= 1'b0;
    else if (u_tready) m_tvalid <= u_tvalid;
  end

  always_ff @(posedge clk) begin
    if (u_tready && u_tvalid) m_tdata <= {hdr, u_tdata};
  end

endmodule
