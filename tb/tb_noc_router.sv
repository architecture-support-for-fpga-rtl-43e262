// tb_noc_router -- the router with modelled sources and consumers.
//
// Sources are first-word-fall-through queues (like the VR FIFO or a
// neighbouring router's output register); West/East consumers take every
// packet, North/South consumers stall at random, like a busy neighbour.
// Part 1, 4-port router (ROUTER_ID 1): three packets arriving together for
// the North port leave in three consecutive cycles, 2, 3 and 4 cycles after
// arrival, in rotating order; a lone packet crosses in 2 cycles.
// Part 2: random traffic on the 4-port router and on a 3-port router
// (ROUTER_ID 2, no North port): every packet must leave by the port the
// routing rule names, in order per source, none lost or duplicated.
module tb_noc_router;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int DW = 16;
  localparam int FW = HDR_W + DW;

  typedef logic [FW-1:0] flit_t;

  // Two routers under test: index 0 = 4-port (id 1), 1 = 3-port (id 2).
  logic [1:0][3:0]         in_empty, in_rd_en, out_empty, out_rd_en;
  logic [1:0][3:0][FW-1:0] in_flit, out_flit;

  noc_router #(.DATA_W(DW), .ROUTER_ID(1), .HAS_NORTH(1), .HAS_SOUTH(1)) dut4 (
    .clk, .rst_n, .in_empty(in_empty[0]), .in_flit(in_flit[0]), .in_rd_en(in_rd_en[0]),
    .out_empty(out_empty[0]), .out_flit(out_flit[0]), .out_rd_en(out_rd_en[0]));
  noc_router #(.DATA_W(DW), .ROUTER_ID(2), .HAS_NORTH(0), .HAS_SOUTH(1)) dut3 (
    .clk, .rst_n, .in_empty(in_empty[1]), .in_flit(in_flit[1]), .in_rd_en(in_rd_en[1]),
    .out_empty(out_empty[1]), .out_flit(out_flit[1]), .out_rd_en(out_rd_en[1]));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Source queues and expected per (router, source, output) order.
  flit_t src_q [2][4][$];
  flit_t exp_q [2][4][4][$];
  logic [1:0][3:0] stall;       // consumer not taking (N/S only)
  int   cycle = 0;
  int   out_cycle [$];          // cycles at which router 0 North delivered
  int   out_src [$];            // and from which source
  int   received = 0;

  function automatic int ref_route(int me, flit_t f);
    hdr_t h = hdr_t'(f[FW-1 -: HDR_W]);
    if (int'(h.router_id) > me) return 2;
    if (int'(h.router_id) < me) return 3;
    return h.vr_id ? 1 : 0;
  endfunction

  function automatic flit_t mk(int router_id, int vr, int src, int seq);
    hdr_t h = '{vi_id: 10'(seq), vr_id: 1'(vr), router_id: 5'(router_id)};
    return {h, 4'(src), 12'(seq)};
  endfunction

  always @(posedge clk) cycle <= cycle + 1;

  // Consumers: record what leaves, check it against the expected order.
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < 2; r++)
      for (int d = 0; d < 4; d++)
        if (out_rd_en[r][d]) begin
          int s;
          s = int'(out_flit[r][d][DW-1 -: 4]);
          received++;
          if (r == 0 && d == 2) begin out_cycle.push_back(cycle); out_src.push_back(s); end
          chk(exp_q[r][s][d].size() != 0, $sformatf("r%0d out %0d: unexpected flit %h", r, d, out_flit[r][d]));
          if (exp_q[r][s][d].size() != 0) begin
            flit_t e;
            e = exp_q[r][s][d].pop_front();
            chk(out_flit[r][d] == e, $sformatf("r%0d out %0d got %h exp %h", r, d, out_flit[r][d], e));
          end
        end
  end

  always_comb
    for (int r = 0; r < 2; r++)
      for (int d = 0; d < 4; d++)
        out_rd_en[r][d] = !out_empty[r][d] && !stall[r][d];

  // Sources: pop on RD_EN, present the new head.
  always @(posedge clk) begin
    for (int r = 0; r < 2; r++)
      for (int d = 0; d < 4; d++)
        if (rst_n && in_rd_en[r][d]) begin
          chk(src_q[r][d].size() != 0, "RD_EN on an empty source");
          void'(src_q[r][d].pop_front());
        end
  end
  always @(negedge clk) begin
    #1;
    for (int r = 0; r < 2; r++)
      for (int d = 0; d < 4; d++) begin
        in_empty[r][d] = (src_q[r][d].size() == 0);
        in_flit[r][d]  = (src_q[r][d].size() == 0) ? '0 : src_q[r][d][0];
      end
  end

  task automatic push(int r, int s, flit_t f);
    int me = (r == 0) ? 1 : 2;
    src_q[r][s].push_back(f);
    exp_q[r][s][ref_route(me, f)].push_back(f);
  endtask


  initial begin
    stall = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // ---- Part 1: lone packet W -> E on router 1 --------------------------
    @(negedge clk);
    push(0, 0, mk(1, 1, 0, 1));
    begin
      int start;
      start = cycle;
      while (out_empty[0][1]) @(negedge clk);
      chk(cycle - start == 2, $sformatf("lone packet latency %0d (exp 2)", cycle - start));
    end
    repeat (3) @(negedge clk);
    // ---- Part 1: three packets for North arrive together ------------------
    out_cycle.delete();
    out_src.delete();
    push(0, 0, mk(3, 0, 0, 2));
    push(0, 1, mk(3, 0, 1, 3));
    push(0, 3, mk(2, 1, 3, 4));
    begin
      int start;
      start = cycle;
      repeat (6) @(negedge clk);
      chk(out_cycle.size() == 3, $sformatf("three packets out (%0d)", out_cycle.size()));
      if (out_cycle.size() == 3) begin
        chk(out_cycle[0] - start == 2, $sformatf("first after 2 cycles (%0d)", out_cycle[0] - start));
        chk(out_cycle[1] == out_cycle[0] + 1 && out_cycle[2] == out_cycle[1] + 1,
            "following packets leave one per cycle");
      end
    end
    chk(out_src.size() == 3 && out_src[0] == 3 && out_src[1] == 0 && out_src[2] == 1,
        $sformatf("rotation order %p", out_src));
    // second wave: same sources, order must rotate back to the first
    out_cycle.delete();
    out_src.delete();
    push(0, 0, mk(3, 0, 0, 5));
    push(0, 1, mk(3, 0, 1, 6));
    push(0, 3, mk(2, 1, 3, 7));
    repeat (8) @(negedge clk);
    chk(out_cycle.size() == 3, "second wave delivered");
    // North line sources in rotation order: S, W, E (counter starts at the
    // source after North), and the second wave starts again from S.
    chk(out_src.size() == 3 && out_src[0] == 3 && out_src[1] == 0 && out_src[2] == 1,
        $sformatf("second wave rotation order %p", out_src));
    // ---- Part 2: random traffic -------------------------------------------
    for (int i = 0; i < 3000; i++) begin
      for (int r = 0; r < 2; r++) begin
        int me;
        me = (r == 0) ? 1 : 2;
        for (int s = 0; s < 4; s++) begin
          if (r == 1 && s == 2) continue;                // no North port
          if ($urandom % 100 < 30 && src_q[r][s].size() < 8) begin
            int rid, vr;
            vr = $urandom % 2;
            // a source never sends back where it came from
            do begin
              rid = (r == 0) ? $urandom % 4 : $urandom % 3;
              if (s == 2 && rid > me) rid = me;           // came from North
              if (s == 3 && rid < me) rid = me;           // came from South
            end while (rid == me && ((s == 0 && vr == 0) || (s == 1 && vr == 1)));
            push(r, s, mk(rid, vr, s, i));
          end
        end
        stall[r][2] = ($urandom % 3 == 0);
        stall[r][3] = ($urandom % 3 == 0);
      end
      @(negedge clk);
    end
    stall = '0;
    repeat (40) @(negedge clk);
    for (int r = 0; r < 2; r++)
      for (int s = 0; s < 4; s++) begin
        chk(src_q[r][s].size() == 0, $sformatf("router %0d source %0d drained", r, s));
        for (int d = 0; d < 4; d++)
          chk(exp_q[r][s][d].size() == 0, $sformatf("router %0d %0d->%0d all delivered", r, s, d));
      end
    chk(received > 1000, $sformatf("enough traffic (%0d)", received));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
