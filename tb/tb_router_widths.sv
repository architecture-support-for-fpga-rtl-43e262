// tb_router_widths -- the 4-port router at the payload widths of the router
// scalability study: 32, 64, 128 and 256 bits (flits of 48 to 272 bits).
//
// One router (ROUTER_ID 1, all four ports) per width, side by side. Each
// input is a queue that receives random packets for the other three ports
// (no U-turn) at random times. The payload is random over its whole width,
// except for a source tag and a sequence number in its low 32 bits. The West
// and East consumers (VRs) take every packet; the North and South consumers
// (neighbouring routers) raise RD_EN at random, so output lines stall.
// Checked per width: every packet arrives once, unchanged over the full
// flit, in order per source and output; none leaves earlier than two cycles
// after it was pulled (RD_EN), and the fastest take exactly two; output
// lines deliver back-to-back packets, one per cycle.
module tb_router_widths;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NW = 4;
  localparam int PACKETS = 600;               // per source and width
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int done [NW];

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar w = 0; w < NW; w++) begin : g_w
    localparam int DW = 32 << w;
    localparam int FW = HDR_W + DW;
    typedef logic [FW-1:0] flit_t;

    logic [3:0] in_empty, in_rd_en, out_empty, out_rd_en;
    logic [3:0][FW-1:0] in_flit, out_flit;
    logic [1:0] stall_ns;

    noc_router #(.DATA_W(DW), .ROUTER_ID(1), .HAS_NORTH(1), .HAS_SOUTH(1)) dut (
      .clk, .rst_n, .in_empty, .in_flit, .in_rd_en, .out_empty, .out_flit, .out_rd_en);

    // W and E are VRs; N and S stall at random.
    assign out_rd_en = ~out_empty & {~stall_ns[1], ~stall_ns[0], 2'b11};

    flit_t q [4][$];
    flit_t exp_q [4][4][$];                   // [src][out]
    int    pulled_at [4][$];                  // [src] cycle of each RD_EN
    int    sent = 0, got = 0, back_to_back = 0;
    int    last_out [4];
    int    min_lat = 1 << 30;

    function automatic flit_t mk(int src, int dst, int seq);
      hdr_t h;
      logic [DW-1:0] p;
      h.vi_id = 10'($urandom);
      case (2'(dst))
        DIR_W:   begin h.router_id = 5'd1; h.vr_id = 1'b0; end
        DIR_E:   begin h.router_id = 5'd1; h.vr_id = 1'b1; end
        DIR_N:   begin h.router_id = 5'(2 + $urandom % 30); h.vr_id = 1'($urandom); end
        default: begin h.router_id = 5'd0; h.vr_id = 1'($urandom); end
      endcase
      for (int i = 0; i < DW / 32; i++) p[i*32 +: 32] = $urandom;
      p[31:0] = {2'(src), 30'(seq)};
      return {h, p};
    endfunction

    always @(posedge clk) if (rst_n) begin
      for (int s = 0; s < 4; s++)
        if (in_rd_en[s]) begin
          void'(q[s].pop_front());
          pulled_at[s].push_back(cycle);
        end
      for (int d = 0; d < 4; d++)
        if (out_rd_en[d]) begin
          int s, n;
          s = int'(out_flit[d][31:30]);
          chk(exp_q[s][d].size() != 0 && exp_q[s][d][0] == out_flit[d],
              $sformatf("width %0d: packet at output %0d from input %0d intact and in order", DW, d, s));
          if (exp_q[s][d].size() != 0) void'(exp_q[s][d].pop_front());
          // packet n of source s was its (n+1)-th pull
          n = int'(out_flit[d][29:0]);
          chk(pulled_at[s].size() > n && cycle - pulled_at[s][n] >= 2,
              $sformatf("width %0d: two-cycle minimum traversal", DW));
          if (pulled_at[s].size() > n && cycle - pulled_at[s][n] < min_lat)
            min_lat = cycle - pulled_at[s][n];
          if (last_out[d] == cycle - 1) back_to_back++;
          last_out[d] = cycle;
          got++;
        end
    end

    always @(negedge clk) begin
      #1;
      for (int s = 0; s < 4; s++) begin
        in_empty[s] = (q[s].size() == 0);
        in_flit[s]  = (q[s].size() == 0) ? '0 : q[s][0];
      end
      stall_ns = 2'($urandom % 4 == 0 ? $urandom : 0);
    end

    initial begin
      int seq [4];
      in_empty = '1; in_flit = '0; stall_ns = '0;
      last_out = '{-5, -5, -5, -5};
      seq = '{0, 0, 0, 0};
      wait (rst_n);
      for (int c = 0; c < PACKETS * 2; c++) begin
        @(negedge clk);
        for (int s = 0; s < 4; s++)
          if (seq[s] < PACKETS && $urandom % 2 == 0) begin
            int d;
            flit_t f;
            d = (s + 1 + $urandom % 3) % 4;   // any port but its own
            f = mk(s, d, seq[s]);
            seq[s]++;
            q[s].push_back(f);
            exp_q[s][d].push_back(f);
            sent++;
          end
      end
      for (int s = 0; s < 4; s++)
        while (seq[s] < PACKETS) begin
          int d;
          flit_t f;
          d = (s + 1 + $urandom % 3) % 4;
          f = mk(s, d, seq[s]);
          seq[s]++;
          q[s].push_back(f);
          exp_q[s][d].push_back(f);
          sent++;
        end
      while (q[0].size() + q[1].size() + q[2].size() + q[3].size() != 0) @(negedge clk);
      repeat (6) @(negedge clk);
      chk(got == sent, $sformatf("width %0d: all %0d packets delivered (%0d)", DW, sent, got));
      chk(min_lat == 2, $sformatf("width %0d: fastest traversal is two cycles (%0d)", DW, min_lat));
      chk(back_to_back > sent / 4, $sformatf("width %0d: back-to-back packets on an output (%0d)", DW, back_to_back));
      $display("width %0d: %0d packets, %0d back-to-back", DW, got, back_to_back);
      done[w] = 1;
    end
  end

  initial begin
    done = '{0, 0, 0, 0};
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (done[0] != 0 && done[1] != 0 && done[2] != 0 && done[3] != 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
