// noc_router -- bufferless one-dimensional router, 3-port or 4-port.
//
// A router sits in a column of routers. Its West and East ports face two
// virtual regions (VRs), its North and South ports the neighbouring routers.
// The routers at the two ends of the column have no neighbour on one side and
// are built as 3-port routers (HAS_NORTH or HAS_SOUTH = 0): the missing port
// disappears from the crossbar, which then switches two inputs per line.
//
// The router stores no packets of its own. Every input is a source that
// shows its head packet (in_flit) and EMPTY, and is emptied by RD_EN: the
// FIFO inside a VR, or the output register of the neighbouring router. Per
// input, noc_route_compute decides the output from the header; per output,
// a noc_allocator grants one requesting source per cycle in rotating order
// and pulls its packet with RD_EN into the crossbar (noc_crossbar).
//
// Outputs use the same handshake in reverse: out_empty/out_flit are read by
// the consumer, which asserts out_rd_en to take the packet. A VR consumer
// takes every packet (out_rd_en = !out_empty); a neighbouring router takes it
// when its own allocator grants it, which stalls this router's line until
// then. Ports are arrays indexed by dir_e (W=0, E=1, N=2, S=3); a missing
// port reads EMPTY = 1 and never asserts RD_EN.
//
// Timing: a packet whose source is non-empty in cycle t and is granted is
// at out_flit in cycle t+2; back-to-back packets leave one per cycle.
module noc_router
  import noc_pkg::*;
#(
  parameter int unsigned DATA_W    = DEFAULT_DATA_W,
  parameter int unsigned ROUTER_ID = 0,
  parameter bit          HAS_NORTH = 1'b1,
  parameter bit          HAS_SOUTH = 1'b1,
  localparam int unsigned FLIT_W   = HDR_W + DATA_W
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // sources
  input  logic [NUM_DIRS-1:0]             in_empty,
  input  logic [NUM_DIRS-1:0][FLIT_W-1:0] in_flit,
  output logic [NUM_DIRS-1:0]             in_rd_en,
  // output channels
  output logic [NUM_DIRS-1:0]             out_empty,
  output logic [NUM_DIRS-1:0][FLIT_W-1:0] out_flit,
  input  logic [NUM_DIRS-1:0]             out_rd_en
);

  // Compact port numbering: 0 = W, 1 = E, then N (if present), then S.
  localparam int unsigned NP   = 2 + int'(HAS_NORTH) + int'(HAS_SOUTH);
  localparam int unsigned N_IN = NP - 1;
  localparam int unsigned SW   = (NP > 2) ? $clog2(NP - 1) : 1;

  function automatic dir_e dir_of(int unsigned p);
    case (p)
      0:       return DIR_W;
      1:       return DIR_E;
      2:       return HAS_NORTH ? DIR_N : DIR_S;
      default: return DIR_S;
    endcase
  endfunction

  logic [NP-1:0][FLIT_W-1:0] c_in_flit, c_out_flit;
  logic [NP-1:0]             c_empty, c_rd_en, c_out_valid, c_out_pop;
  logic [NP-1:0]             c_ready, c_load;
  logic [NP-1:0][SW-1:0]     c_sel;
  dir_e                      c_route [NP];
  logic [NP-1:0][N_IN-1:0]   grant;

  // Inputs: routing decision on the head packet of each source.
  for (genvar p = 0; p < NP; p++) begin : g_in
    localparam dir_e D = dir_of(p);
    assign c_in_flit[p] = in_flit[D];
    assign c_empty[p]   = in_empty[D];
    noc_route_compute #(.ROUTER_ID(ROUTER_ID)) u_rc (
      .hdr (hdr_t'(in_flit[D][FLIT_W-1 -: HDR_W])),
      .dir (c_route[p])
    );
  end

  // One allocator per output line; source k of line o is port (o+1+k)%NP.
  for (genvar o = 0; o < NP; o++) begin : g_alloc
    logic [N_IN-1:0] req;
    logic            step_unused;
    for (genvar k = 0; k < N_IN; k++) begin : g_req
      localparam int unsigned SRC = (o + 1 + k) % NP;
      assign req[k] = !c_empty[SRC] && (c_route[SRC] == dir_of(o));
    end
    noc_allocator #(.N_IN(N_IN)) u_alloc (
      .clk   (clk),
      .rst_n (rst_n),
      .req   (req),
      .ready (c_ready[o]),
      .rd_en (grant[o]),
      .sel   (c_sel[o]),
      .load  (c_load[o]),
      .step  (step_unused)
    );
  end

  // RD_EN of a source: the grant of whichever output line took it.
  always_comb begin
    c_rd_en = '0;
    for (int unsigned o = 0; o < NP; o++)
      for (int unsigned k = 0; k < N_IN; k++)
        if (grant[o][k]) c_rd_en[(o + 1 + k) % NP] = 1'b1;
  end

  noc_crossbar #(.FLIT_W(FLIT_W), .NPORTS(NP)) u_xbar (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_flit   (c_in_flit),
    .sel       (c_sel),
    .load      (c_load),
    .out_pop   (c_out_pop),
    .ready     (c_ready),
    .out_flit  (c_out_flit),
    .out_valid (c_out_valid)
  );

  // Map the compact ports back onto the four directions.
  always_comb begin
    in_rd_en  = '0;
    out_empty = '1;
    out_flit  = '0;
    for (int unsigned p = 0; p < NP; p++) begin
      in_rd_en[dir_of(p)]  = c_rd_en[p];
      out_empty[dir_of(p)] = !c_out_valid[p];
      out_flit[dir_of(p)]  = c_out_flit[p];
    end
  end

  for (genvar p = 0; p < NP; p++) begin : g_pop
    assign c_out_pop[p] = out_rd_en[dir_of(p)] && c_out_valid[p];
  end

  // A source is granted by at most one output line, and only when it has a
  // packet.
  a_rd_en_not_empty : assert property (@(posedge clk) disable iff (!rst_n)
    (in_rd_en & in_empty) == '0);

endmodule
