// vr_interface -- NoC interface of a virtual region.
//
// Packets leaving a VR are held here, not in the router: the Wrapper writes
// them over an AXI4-Stream slave port (tdata/tvalid/tready only) into a FIFO,
// and the router's allocators read the FIFO through the pull handshake:
// the FIFO shows EMPTY and its head packet on data_out, and the allocator
// takes the head by asserting rd_en (same-cycle, first-word-fall-through).
// A packet accepted on the AXI port is visible to the router one cycle
// later. tready is low while the FIFO is full, which stalls the user logic.
// The FIFO depth and its first-word-fall-through read mode are this design's
// choices; a single clock serves VR and router.
module vr_interface
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W = DEFAULT_DATA_W,
  parameter int unsigned DEPTH  = 8,
  localparam int unsigned FLIT_W = HDR_W + DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Stream slave, from the Wrapper
  input  logic [FLIT_W-1:0] s_tdata,
  input  logic              s_tvalid,
  output logic              s_tready,
  // pull side, to the router allocators
  output logic              empty,
  output logic [FLIT_W-1:0] data_out,
  input  logic              rd_en
);

  logic full;

  assign s_tready = !full;

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(DEPTH)) u_fifo (
    .clk   (clk),
    .rst_n (rst_n),
    .wr_en (s_tvalid && s_tready),
    .din   (s_tdata),
    .full  (full),
    .rd_en (rd_en),
    .dout  (data_out),
    .empty (empty)
  );

  // AXI4-Stream: a valid packet is held stable until accepted.
  a_axis_hold : assert property (@(posedge clk) disable iff (!rst_n)
    (s_tvalid && !s_tready) |=> (s_tvalid && $stable(s_tdata)));

endmodule
