// sync_fifo -- single-clock first-word-fall-through FIFO.
//
// The head entry is visible on dout whenever empty is low; rd_en removes it
// at the next clock edge. A write is seen as non-empty one cycle later.
// Writing when full and reading when empty are not allowed (asserted).
// Storage is a plain register array of DEPTH entries (DEPTH a power of 2).
module sync_fifo #(
  parameter int unsigned WIDTH = 48,
  parameter int unsigned DEPTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             rd_en,
  output logic [WIDTH-1:0] dout,
  output logic             empty
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      count;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign dout  = mem[rptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (wr_en) wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      if (rd_en) rptr <= (32'(rptr) == DEPTH - 1) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(wr_en) - (AW+1)'(rd_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr] <= din;
  end

  a_no_overflow  : assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  a_no_underflow : assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty);

endmodule
