// noc_allocator -- mutual-exclusion logic of one crossbar output line.
//
// Each output line of a router has one allocator. Its requests are the
// sources (the other n-1 ports) whose head packet is routed to this output.
// It implements the pull side of the 3-way handshake: a source signals a
// packet by deasserting EMPTY, the allocator asserts that source's RD_EN when
// the crossbar line is ready, and the packet is loaded into the crossbar in
// the same cycle. Only one source is granted per cycle, so only one packet
// crosses the output line at a time.
//
// Arbitration: alloc_encoder picks the source; a counter register (reset to
// 0) then moves to the source after the granted one, so that simultaneous
// arrivals from ports 1, 2 and 3 leave in the order 1, 2, 3 and the next wave
// again starts with port 1. The counter moves on every grant, which
// reproduces that order; the published block diagram adds a STEP value to
// the counter instead, whose exact use is not spelled out.
//
// Timing: rd_en, sel and load are combinational from req, ready and the
// counter; the counter updates on the clock edge that ends the grant cycle.
module noc_allocator #(
  parameter int unsigned N_IN = 2,
  localparam int unsigned SW  = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] req,
  input  logic            ready,
  output logic [N_IN-1:0] rd_en,
  output logic [SW-1:0]   sel,
  output logic            load,
  output logic            step
);

  logic [SW-1:0] counter_q;
  logic          any;

  alloc_encoder #(.N_IN(N_IN)) u_enc (
    .req  (req),
    .ptr  (counter_q),
    .any  (any),
    .step (step),
    .sel  (sel)
  );

  assign load = any && ready;

  always_comb begin
    rd_en = '0;
    if (load) rd_en[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      counter_q <= '0;
    end else if (load) begin
      counter_q <= (32'(sel) + 1 >= N_IN) ? '0 : SW'(32'(sel) + 1);
    end
  end

  // A grant goes to one requesting source only.
  a_grant_onehot : assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(rd_en) && ((rd_en & ~req) == '0));

endmodule
