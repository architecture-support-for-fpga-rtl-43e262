// noc_route_compute -- one-dimensional routing decision of a router.
//
// The routers of a column only move packets up or down, or hand them to one
// of their two virtual regions. A packet whose destination ROUTER_ID is larger
// than this router's ROUTER_ID goes North, a smaller one goes South, and at
// the destination router the VR_ID bit picks West (0) or East (1). There is
// no deflection, so the hop count is always |dst - ROUTER_ID|.
//
// Purely combinational: hdr in, dir out in the same cycle. Router IDs grow
// from South to North, which follows the routing pseudo-code of the design
// (the prose description states the comparison the other way round).
// VI_ID is not used here. For ROUTER_ID 0 the South test is constant false
// (nothing is below router 0), which lint reports as a constant comparison;
// synthesis removes it.
module noc_route_compute
  import noc_pkg::*;
#(
  parameter int unsigned ROUTER_ID = 0
) (
  input  hdr_t hdr,
  output dir_e dir
);

  localparam logic [ROUTER_ID_W-1:0] MY_ID = ROUTER_ID_W'(ROUTER_ID);

  always_comb begin
    if (hdr.router_id > MY_ID)       dir = DIR_N;
    else if (hdr.router_id < MY_ID)  dir = DIR_S;
    else if (hdr.vr_id == '0)        dir = DIR_W;
    else                             dir = DIR_E;
  end

endmodule
