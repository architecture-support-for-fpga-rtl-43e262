// mt_noc_top -- single-column multi-tenant NoC shell.
//
// NUM_ROUTERS routers are stacked in one column, router 0 at the South end.
// Each router r serves two virtual regions: VR 2r on its West port (VR_ID 0)
// and VR 2r+1 on its East port (VR_ID 1). The two end routers are 3-port
// routers, the others 4-port. A packet from a VR travels up or down the
// column to the router named in its header and is delivered to the VR named
// by VR_ID, where the access monitor admits it only if it belongs to the
// VR's virtual instance. In addition, vertically adjacent VRs of the same
// side are joined by direct links, one per direction, which carry a word per
// clock without using the routers (only between VRs of the same VI).
//
// The tenants' USER REGIONs and the hypervisor are outside: per VR v the
// ports user_tx_* (payloads into the NoC), user_rx_* (payloads delivered),
// dln_* / dls_* (direct links: *_tx sends to the VR north / south of v,
// *_rx receives from the VR south / north of v) and the register write port
// cfg_* (cfg_vr selects the VR). Packed arrays are indexed by VR number.
//
// Timing, no contention: a payload accepted on user_tx in cycle t reaches
// the local router's FIFO head at t+2, leaves that router at t+4, gains 2
// cycles per further router, and appears on user_rx one cycle after it
// leaves the last router (t+5 for a VR on the same router).
//
// The two VRs of the top router have no VR to their North and the two of
// router 0 none to their South: their direct-link ports on that side exist
// only to keep the arrays regular, and their outputs are constant 0 (never
// ready, never valid).
module mt_noc_top
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W      = DEFAULT_DATA_W,
  parameter int unsigned NUM_ROUTERS = 3,
  parameter int unsigned FIFO_DEPTH  = 8,
  localparam int unsigned NV         = 2 * NUM_ROUTERS,
  localparam int unsigned VW         = (NV > 1) ? $clog2(NV) : 1,
  localparam int unsigned FLIT_W     = HDR_W + DATA_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // hypervisor register writes
  input  logic                       cfg_we,
  input  logic [VW-1:0]              cfg_vr,
  input  cfg_addr_e                  cfg_addr,
  input  logic [HDR_W-1:0]           cfg_wdata,
  // USER REGION payload streams through the NoC
  input  logic [NV-1:0][DATA_W-1:0]  user_tx_tdata,
  input  logic [NV-1:0]              user_tx_tvalid,
  output logic [NV-1:0]              user_tx_tready,
  output logic [NV-1:0]              user_rx_valid,
  output logic [NV-1:0][DATA_W-1:0]  user_rx_data,
  output logic [NV-1:0]              user_rx_drop,
  // direct links, northward
  input  logic [NV-1:0][DATA_W-1:0]  dln_tx_tdata,
  input  logic [NV-1:0]              dln_tx_tvalid,
  output logic [NV-1:0]              dln_tx_tready,
  output logic [NV-1:0][DATA_W-1:0]  dln_rx_tdata,
  output logic [NV-1:0]              dln_rx_tvalid,
  input  logic [NV-1:0]              dln_rx_tready,
  // direct links, southward
  input  logic [NV-1:0][DATA_W-1:0]  dls_tx_tdata,
  input  logic [NV-1:0]              dls_tx_tvalid,
  output logic [NV-1:0]              dls_tx_tready,
  output logic [NV-1:0][DATA_W-1:0]  dls_rx_tdata,
  output logic [NV-1:0]              dls_rx_tvalid,
  input  logic [NV-1:0]              dls_rx_tready
);

  // Router side signals, per router and direction.
  logic [NUM_ROUTERS-1:0][NUM_DIRS-1:0]             r_in_empty, r_in_rd_en;
  logic [NUM_ROUTERS-1:0][NUM_DIRS-1:0][FLIT_W-1:0] r_in_flit, r_out_flit;
  logic [NUM_ROUTERS-1:0][NUM_DIRS-1:0]             r_out_empty, r_out_rd_en;

  // VR side signals.
  logic [NV-1:0]              vr_tx_empty, vr_tx_rd_en;
  logic [NV-1:0][FLIT_W-1:0]  vr_tx_flit;
  logic [NV-1:0][VI_ID_W-1:0] vr_vi_id;

  for (genvar v = 0; v < NV; v++) begin : g_vr
    virtual_region #(.DATA_W(DATA_W), .FIFO_DEPTH(FIFO_DEPTH)) u_vr (
      .clk            (clk),
      .rst_n          (rst_n),
      .cfg_we         (cfg_we && (32'(cfg_vr) == v)),
      .cfg_addr       (cfg_addr),
      .cfg_wdata      (cfg_wdata),
      .vi_id          (vr_vi_id[v]),
      .rx_valid       (!r_out_empty[v/2][v%2]),
      .rx_flit        (r_out_flit[v/2][v%2]),
      .tx_empty       (vr_tx_empty[v]),
      .tx_flit        (vr_tx_flit[v]),
      .tx_rd_en       (vr_tx_rd_en[v]),
      .user_rx_valid  (user_rx_valid[v]),
      .user_rx_data   (user_rx_data[v]),
      .user_rx_drop   (user_rx_drop[v]),
      .user_tx_tdata  (user_tx_tdata[v]),
      .user_tx_tvalid (user_tx_tvalid[v]),
      .user_tx_tready (user_tx_tready[v])
    );
  end

  for (genvar r = 0; r < NUM_ROUTERS; r++) begin : g_router
    localparam bit HN = (r < NUM_ROUTERS - 1);
    localparam bit HS = (r > 0);

    // West and East: the two VRs. A VR takes every packet delivered to it.
    for (genvar s = 0; s < 2; s++) begin : g_side
      assign r_in_empty[r][s]     = vr_tx_empty[2*r+s];
      assign r_in_flit[r][s]      = vr_tx_flit[2*r+s];
      assign vr_tx_rd_en[2*r+s]   = r_in_rd_en[r][s];
      assign r_out_rd_en[r][s]    = !r_out_empty[r][s];
    end

    // North: output register of router r+1's South port, and vice versa.
    if (HN) begin : g_n
      assign r_in_empty[r][DIR_N]  = r_out_empty[r+1][DIR_S];
      assign r_in_flit[r][DIR_N]   = r_out_flit[r+1][DIR_S];
      assign r_out_rd_en[r][DIR_N] = r_in_rd_en[r+1][DIR_S];
    end else begin : g_no_n
      assign r_in_empty[r][DIR_N]  = 1'b1;
      assign r_in_flit[r][DIR_N]   = '0;
      assign r_out_rd_en[r][DIR_N] = 1'b0;
    end
    if (HS) begin : g_s
      assign r_in_empty[r][DIR_S]  = r_out_empty[r-1][DIR_N];
      assign r_in_flit[r][DIR_S]   = r_out_flit[r-1][DIR_N];
      assign r_out_rd_en[r][DIR_S] = r_in_rd_en[r-1][DIR_N];
    end else begin : g_no_s
      assign r_in_empty[r][DIR_S]  = 1'b1;
      assign r_in_flit[r][DIR_S]   = '0;
      assign r_out_rd_en[r][DIR_S] = 1'b0;
    end

    noc_router #(
      .DATA_W    (DATA_W),
      .ROUTER_ID (r),
      .HAS_NORTH (HN),
      .HAS_SOUTH (HS)
    ) u_router (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_empty  (r_in_empty[r]),
      .in_flit   (r_in_flit[r]),
      .in_rd_en  (r_in_rd_en[r]),
      .out_empty (r_out_empty[r]),
      .out_flit  (r_out_flit[r]),
      .out_rd_en (r_out_rd_en[r])
    );
  end

  // Direct links between VR v and VR v+2 (same side, next router north).
  for (genvar v = 0; v < NV; v++) begin : g_dl
    if (v + 2 < NV) begin : g_up
      logic blocked_n, blocked_s;
      vr_direct_link #(.DATA_W(DATA_W)) u_north (
        .clk      (clk),
        .rst_n    (rst_n),
        .a_vi_id  (vr_vi_id[v]),
        .b_vi_id  (vr_vi_id[v+2]),
        .s_tdata  (dln_tx_tdata[v]),
        .s_tvalid (dln_tx_tvalid[v]),
        .s_tready (dln_tx_tready[v]),
        .m_tdata  (dln_rx_tdata[v+2]),
        .m_tvalid (dln_rx_tvalid[v+2]),
        .m_tready (dln_rx_tready[v+2]),
        .blocked  (blocked_n)
      );
      vr_direct_link #(.DATA_W(DATA_W)) u_south (
        .clk      (clk),
        .rst_n    (rst_n),
        .a_vi_id  (vr_vi_id[v+2]),
        .b_vi_id  (vr_vi_id[v]),
        .s_tdata  (dls_tx_tdata[v+2]),
        .s_tvalid (dls_tx_tvalid[v+2]),
        .s_tready (dls_tx_tready[v+2]),
        .m_tdata  (dls_rx_tdata[v]),
        .m_tvalid (dls_rx_tvalid[v]),
        .m_tready (dls_rx_tready[v]),
        .blocked  (blocked_s)
      );
    end else begin : g_top_edge
      // Top row: no VR further north.
      assign dln_tx_tready[v] = 1'b0;
      assign dls_rx_tdata[v]  = '0;
      assign dls_rx_tvalid[v] = 1'b0;
    end
    if (v < 2) begin : g_bottom_edge
      // Bottom row: no VR further south.
      assign dls_tx_tready[v] = 1'b0;
      assign dln_rx_tdata[v]  = '0;
      assign dln_rx_tvalid[v] = 1'b0;
    end
  end

endmodule
