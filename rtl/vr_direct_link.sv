// vr_direct_link -- router-free stream between two adjacent virtual regions.
//
// Neighbouring VRs are also wired to each other directly, so that two parts
// of one tenant's design placed side by side can stream a word every clock
// without loading the routers. The link is a full-throughput AXI4-Stream
// register stage (a word accepted in cycle t is offered in cycle t+1). It is
// open only while both ends carry the same VI_ID register value; otherwise
// words are accepted and discarded and blocked is high, so that one tenant
// cannot reach another tenant's region by this path. That VI check, like
// the register stage, is this design's choice.
module vr_direct_link
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W = DEFAULT_DATA_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [VI_ID_W-1:0] a_vi_id,
  input  logic [VI_ID_W-1:0] b_vi_id,
  input  logic [DATA_W-1:0]  s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  output logic [DATA_W-1:0]  m_tdata,
  output logic               m_tvalid,
  input  logic               m_tready,
  output logic               blocked
);

  logic open_q;

  assign blocked  = !open_q;
  assign s_tready = !m_tvalid || m_tready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      open_q   <= 1'b0;
      m_tvalid <= 1'b0;
    end else begin
      open_q <= (a_vi_id == b_vi_id);
      if (s_tready) m_tvalid <= s_tvalid && open_q;
    end
  end

  always_ff @(posedge clk) begin
    if (s_tready && s_tvalid && open_q) m_tdata <= s_tdata;
  end

endmodule
