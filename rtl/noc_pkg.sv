// noc_pkg -- types and constants shared by the multi-tenant NoC shell.
//
// A packet (one flit) is a fixed 16-bit header followed by a payload of
// DATA_W bits. The header carries the tenant's virtual-instance number
// (VI_ID, 10 bits), the destination virtual region on the destination router
// (VR_ID, 1 bit: 0 = West, 1 = East) and the destination router (ROUTER_ID,
// 5 bits). Field order and widths follow the published packet format; placing
// VI_ID in the most significant bits is this design's choice, as the format
// fixes only the left-to-right order.
package noc_pkg;

  localparam int unsigned VI_ID_W     = 10;
  localparam int unsigned VR_ID_W     = 1;
  localparam int unsigned ROUTER_ID_W = 5;
  localparam int unsigned HDR_W       = VI_ID_W + VR_ID_W + ROUTER_ID_W;  // 16

  // Payload width of the reference configuration (32-bit routers).
  localparam int unsigned DEFAULT_DATA_W = 32;

  typedef struct packed {
    logic [VI_ID_W-1:0]     vi_id;
    logic [VR_ID_W-1:0]     vr_id;
    logic [ROUTER_ID_W-1:0] router_id;
  } hdr_t;

  // Router port directions. West/East face the two virtual regions of a
  // router, North/South face the neighbouring routers of the column.
  typedef enum logic [1:0] {
    DIR_W = 2'd0,
    DIR_E = 2'd1,
    DIR_N = 2'd2,
    DIR_S = 2'd3
  } dir_e;

  localparam int unsigned NUM_DIRS = 4;

  // Addresses of the per-VR configuration registers.
  typedef enum logic [1:0] {
    CFG_ROUTER_ID = 2'd0,
    CFG_VR_ID     = 2'd1,
    CFG_VI_ID     = 2'd2
  } cfg_addr_e;

endpackage
