// tb_router_traffic -- latency and waiting time of a 3-port router under
// synthetic traffic, in the two configurations of the router study:
//   no collision   W -> E, E -> N, N -> W (each output fed by one input)
//   collision      W -> N and E -> N (two inputs share one output)
// for injection rates 0.2, 0.4 and 0.6 flit/cycle per source. Each source
// is an unbounded queue (the VR FIFO); a flit created in cycle c can be read
// in cycle c. Latency = cycle the flit is at the router output - c;
// waiting = cycle it is read (RD_EN) - c. Every flit is checked to arrive
// once, in order, at the right output. The averages are printed; checks
// cover the fixed 2-cycle traversal, zero waiting without collision and
// waiting that grows with the rate under collision.
module tb_router_traffic;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int DW = 32, FW = HDR_W + DW;
  localparam int INJECT_CYCLES = 1000;

  logic [3:0] in_empty, in_rd_en, out_empty, out_rd_en;
  logic [3:0][FW-1:0] in_flit, out_flit;

  // 3-port router at the south end of a column: ports W, E, N.
  noc_router #(.DATA_W(DW), .ROUTER_ID(0), .HAS_NORTH(1), .HAS_SOUTH(0)) dut (
    .clk, .rst_n, .in_empty, .in_flit, .in_rd_en, .out_empty, .out_flit, .out_rd_en);

  assign out_rd_en = ~out_empty;    // VRs and the next router keep up

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic [FW-1:0] flit_t;
  flit_t q [3][$];               // source queues, index = direction W, E, N
  flit_t exp_q [3][3][$];        // [src][out]
  int    cycle = 0;
  longint lat_sum, wait_sum;
  int    n_flits, max_lat, min_lat;
  int    dest_of [3];            // output direction per source, -1 = silent

  always @(posedge clk) cycle <= cycle + 1;

  // payload: [31:30] source, [29:0] creation cycle
  function automatic flit_t mk(int src, int dst_dir, int c);
    hdr_t h;
    h.vi_id = 10'd1;
    case (dst_dir)
      0: begin h.router_id = 5'd0; h.vr_id = 1'b0; end
      1: begin h.router_id = 5'd0; h.vr_id = 1'b1; end
      default: begin h.router_id = 5'd1; h.vr_id = 1'b0; end
    endcase
    return {h, 2'(src), 30'(c)};
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 3; s++)
      if (in_rd_en[s]) begin
        flit_t f;
        f = q[s].pop_front();
        wait_sum += cycle - int'(f[29:0]);
      end
    for (int d = 0; d < 3; d++)
      if (!out_empty[d]) begin
        int s, l;
        s = int'(out_flit[d][31:30]);
        l = cycle - int'(out_flit[d][29:0]);
        chk(exp_q[s][d].size() != 0 && exp_q[s][d][0] == out_flit[d],
            $sformatf("flit at output %0d from source %0d in order", d, s));
        if (exp_q[s][d].size() != 0) void'(exp_q[s][d].pop_front());
        lat_sum += l; n_flits++;
        if (l > max_lat) max_lat = l;
        if (l < min_lat) min_lat = l;
      end
  end

  always @(negedge clk) begin
    #1;
    for (int s = 0; s < 3; s++) begin
      in_empty[s] = (q[s].size() == 0);
      in_flit[s]  = (q[s].size() == 0) ? '0 : q[s][0];
    end
    in_empty[3] = 1'b1;
    in_flit[3]  = '0;
  end

  real avg_lat [2][3];
  real avg_wait [2][3];

  task automatic run(int cfg, int rate_pct);
    int sent;
    lat_sum = 0; wait_sum = 0; n_flits = 0; max_lat = 0; min_lat = 1 << 30; sent = 0;
    for (int c = 0; c < INJECT_CYCLES; c++) begin
      @(negedge clk);
      for (int s = 0; s < 3; s++)
        if (dest_of[s] >= 0 && ($urandom % 100) < rate_pct) begin
          flit_t f;
          f = mk(s, dest_of[s], cycle);
          q[s].push_back(f);
          exp_q[s][dest_of[s]].push_back(f);
          sent++;
        end
    end
    while (q[0].size() + q[1].size() + q[2].size() != 0) @(negedge clk);
    repeat (4) @(negedge clk);
    chk(n_flits == sent, $sformatf("all %0d flits delivered (%0d)", sent, n_flits));
    avg_lat[cfg][rate_pct / 20 - 1]  = real'(lat_sum) / n_flits;
    avg_wait[cfg][rate_pct / 20 - 1] = real'(wait_sum) / n_flits;
    $display("%s rate %0.1f: flits %0d  avg latency %0.2f  avg waiting %0.2f  min/max latency %0d/%0d",
             cfg ? "collision   " : "no collision", rate_pct / 100.0, n_flits,
             avg_lat[cfg][rate_pct / 20 - 1], avg_wait[cfg][rate_pct / 20 - 1], min_lat, max_lat);
    chk(min_lat == 2, "two-cycle traversal");
    if (cfg == 0) chk(max_lat == 2 && wait_sum == 0, "no collision: no waiting");
  endtask

  initial begin
    in_empty = '1; in_flit = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    dest_of = '{1, 2, 0};                          // W->E, E->N, N->W
    for (int r = 20; r <= 60; r += 20) run(0, r);
    dest_of = '{2, 2, -1};                         // W->N, E->N
    for (int r = 20; r <= 60; r += 20) run(1, r);
    chk(avg_wait[1][0] > avg_wait[0][0], "collision waits longer at 0.2");
    chk(avg_wait[1][1] > avg_wait[1][0] && avg_wait[1][2] > avg_wait[1][1], "waiting grows with the rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
