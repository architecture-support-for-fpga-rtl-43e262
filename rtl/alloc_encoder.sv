// alloc_encoder -- request encoder of one crossbar output line.
//
// Inputs are the control lines of the line: one request per source that has
// a packet waiting (its FIFO is not EMPTY) whose destination is this output.
// For two sources the behaviour is the published truth table:
//   req = 00 -> nothing selected (any = 0)
//   req = 01 -> STEP 0, SELECT 1          req = 10 -> STEP 0, SELECT 0
//   req = 11 -> STEP 1, SELECT alternates between 0 and 1
// The alternation comes from the counter register of the allocator, given
// here as ptr: with several requests the first requesting source at or after
// ptr (cyclically) is selected. The same rule extends the table to three
// sources for the 4-port router; that extension is this design's choice.
// Combinational.
module alloc_encoder #(
  parameter int unsigned N_IN = 2,
  localparam int unsigned SW  = (N_IN > 1) ? $clog2(N_IN) : 1
) (
  input  logic [N_IN-1:0] req,
  input  logic [SW-1:0]   ptr,
  output logic            any,
  output logic            step,
  output logic [SW-1:0]   sel
);

  always_comb begin
    logic [SW:0] nreq;
    logic [SW:0] start;
    logic [SW:0] idx;
    logic        found;
    nreq = '0;
    for (int unsigned i = 0; i < N_IN; i++) nreq = nreq + (SW+1)'(req[i]);
    any   = (nreq != '0);
    step  = (nreq > (SW+1)'(1));
    // Rotating search from the counter value.
    start = (32'(ptr) < N_IN) ? {1'b0, ptr} : '0;
    sel   = '0;
    found = 1'b0;
    for (int unsigned k = 0; k < N_IN; k++) begin
      idx = ((32'(start) + k) >= N_IN) ? (SW+1)'(32'(start) + k - N_IN)
                                        : (SW+1)'(32'(start) + k);
      if (!found && req[idx[SW-1:0]]) begin
        sel   = idx[SW-1:0];
        found = 1'b1;
      end
    end
  end

endmodule
