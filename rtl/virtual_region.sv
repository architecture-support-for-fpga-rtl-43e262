// virtual_region -- shell part of one virtual region (VR).
//
// A VR is the unit of FPGA area rented to a tenant. Its USER REGION (the
// tenant's partially reconfigured design) is outside this module; its
// payload ports are the user_* ports here. Around it the shell places:
//   vr_config_regs  destination ROUTER_ID/VR_ID and own VI_ID, written by the
//                   hypervisor through cfg_*;
//   access_monitor  admits router packets of this VI only, strips headers;
//   vr_wrapper      adds the header to outgoing payloads;
//   vr_interface    AXI4-Stream to FIFO; the router pulls from the FIFO with
//                   tx_empty / tx_flit / tx_rd_en.
// Timing: a payload accepted on user_tx in cycle t is in the FIFO head in
// cycle t+2; a packet on rx in cycle t reaches user_rx in cycle t+1.
module virtual_region
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W     = DEFAULT_DATA_W,
  parameter int unsigned FIFO_DEPTH = 8,
  localparam int unsigned FLIT_W    = HDR_W + DATA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // hypervisor register writes
  input  logic               cfg_we,
  input  cfg_addr_e          cfg_addr,
  input  logic [HDR_W-1:0]   cfg_wdata,
  output logic [VI_ID_W-1:0] vi_id,
  // from the router
  input  logic               rx_valid,
  input  logic [FLIT_W-1:0]  rx_flit,
  // to the router (pulled)
  output logic               tx_empty,
  output logic [FLIT_W-1:0]  tx_flit,
  input  logic               tx_rd_en,
  // USER REGION side
  output logic               user_rx_valid,
  output logic [DATA_W-1:0]  user_rx_data,
  output logic               user_rx_drop,
  input  logic [DATA_W-1:0]  user_tx_tdata,
  input  logic               user_tx_tvalid,
  output logic               user_tx_tready
);

  logic [ROUTER_ID_W-1:0] dst_router_id;
  logic [VR_ID_W-1:0]     dst_vr_id;
  logic [FLIT_W-1:0]      w_tdata;
  logic                   w_tvalid, w_tready;

  vr_config_regs u_regs (
    .clk           (clk),
    .rst_n         (rst_n),
    .cfg_we        (cfg_we),
    .cfg_addr      (cfg_addr),
    .cfg_wdata     (cfg_wdata),
    .dst_router_id (dst_router_id),
    .dst_vr_id     (dst_vr_id),
    .vi_id         (vi_id)
  );

  access_monitor #(.DATA_W(DATA_W)) u_am (
    .clk       (clk),
    .rst_n     (rst_n),
    .vi_id     (vi_id),
    .in_valid  (rx_valid),
    .in_flit   (rx_flit),
    .out_valid (user_rx_valid),
    .out_data  (user_rx_data),
    .drop      (user_rx_drop)
  );

  vr_wrapper #(.DATA_W(DATA_W)) u_wrap (
    .clk           (clk),
    .rst_n         (rst_n),
    .dst_router_id (dst_router_id),
    .dst_vr_id     (dst_vr_id),
    .vi_id         (vi_id),
    .u_tdata       (user_tx_tdata),
    .u_tvalid      (user_tx_tvalid),
    .u_tready      (user_tx_tready),
    .m_tdata       (w_tdata),
    .m_tvalid      (w_tvalid),
    .m_tready      (w_tready)
  );

  vr_interface #(.DATA_W(DATA_W), .DEPTH(FIFO_DEPTH)) u_if (
    .clk      (clk),
    .rst_n    (rst_n),
    .s_tdata  (w_tdata),
    .s_tvalid (w_tvalid),
    .s_tready (w_tready),
    .empty    (tx_empty),
    .data_out (tx_flit),
    .rd_en    (tx_rd_en)
  );

endmodule
