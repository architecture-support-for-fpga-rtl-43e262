// access_monitor -- admission filter at the entrance of a virtual region.
//
// Every packet the router delivers to a VR passes here. It is accepted only
// if its VI_ID equals the VR's VI_ID register; the header is then removed
// and only the payload is handed to the tenant's logic, which never sees
// routing information. Packets of any other virtual instance are discarded
// and flagged on drop. One packet per cycle, one register stage: a packet
// in cycle t gives out_valid (or drop) in cycle t+1. The drop flag and the
// register stage are this design's choices.
module access_monitor
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W = DEFAULT_DATA_W,
  localparam int unsigned FLIT_W = HDR_W + DATA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [VI_ID_W-1:0] vi_id,
  input  logic               in_valid,
  input  logic [FLIT_W-1:0]  in_flit,
  output logic               out_valid,
  output logic [DATA_W-1:0]  out_data,
  output logic               drop
);

  hdr_t hdr;
  logic match;

  assign hdr   = hdr_t'(in_flit[FLIT_W-1 -: HDR_W]);
  assign match = (hdr.vi_id == vi_id);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      drop      <= 1'b0;
    end else begin
      out_valid <= in_valid && match;
      drop      <= in_valid && !match;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && match) out_data <= in_flit[DATA_W-1:0];
  end

endmodule
