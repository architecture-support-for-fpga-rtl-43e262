// noc_crossbar -- reduced crossbar matrix with two register stages per line.
//
// NPORTS input channels, NPORTS output lines. A packet never leaves by the
// port it came in on, so output line o only switches the other NPORTS-1
// inputs: sel = k picks input (o + 1 + k) mod NPORTS. A 4-port router thus
// has three switches per line and a 3-port router two.
//
// Each line is a two-stage pipeline (s1, then the output register s2), which
// gives the router its two-cycle traversal and lets a new packet leave every
// cycle once the line is busy. A stage advances when the stage after it is
// free or is emptied in the same cycle; the output register is emptied by
// out_pop from the consumer, a neighbouring router's RD_EN or a VR that
// always takes (out_pop is ignored while the register is empty). ready[o]
// tells the allocator that line o can be loaded this cycle: a packet loaded
// with load[o] appears at out_flit[o] two clock edges later. The register placement is this design's choice.
module noc_crossbar #(
  parameter int unsigned FLIT_W = 48,
  parameter int unsigned NPORTS = 4,
  localparam int unsigned SW    = (NPORTS > 2) ? $clog2(NPORTS - 1) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NPORTS-1:0][FLIT_W-1:0] in_flit,
  input  logic [NPORTS-1:0][SW-1:0]     sel,
  input  logic [NPORTS-1:0]             load,
  input  logic [NPORTS-1:0]             out_pop,
  output logic [NPORTS-1:0]             ready,
  output logic [NPORTS-1:0][FLIT_W-1:0] out_flit,
  output logic [NPORTS-1:0]             out_valid
);

  logic [NPORTS-1:0][FLIT_W-1:0] s1_d, s2_d, line_d;
  logic [NPORTS-1:0]             s1_v, s2_v, s2_ready;

  for (genvar o = 0; o < NPORTS; o++) begin : g_line
    // Switches of line o: only the NPORTS-1 other inputs.
    always_comb begin
      line_d[o] = '0;
      for (int unsigned k = 0; k < NPORTS - 1; k++) begin
        if (32'(sel[o]) == k) line_d[o] = in_flit[(o + 1 + k) % NPORTS];
      end
    end

    assign s2_ready[o] = !s2_v[o] || out_pop[o];
    assign ready[o]    = !s1_v[o] || s2_ready[o];

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        s1_v[o] <= 1'b0;
        s2_v[o] <= 1'b0;
      end else begin
        if (s2_ready[o]) s2_v[o] <= s1_v[o];
        if (ready[o])    s1_v[o] <= load[o];
      end
    end

    always_ff @(posedge clk) begin
      if (s2_ready[o] && s1_v[o]) s2_d[o] <= s1_d[o];
      if (ready[o] && load[o])    s1_d[o] <= line_d[o];
    end

    // A packet may only be loaded when the line is ready.
    a_load_ready : assert property (@(posedge clk) disable iff (!rst_n)
      load[o] |-> ready[o]);
  end

  assign out_flit  = s2_d;
  assign out_valid = s2_v;

endmodule
