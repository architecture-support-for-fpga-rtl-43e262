// tb_mt_noc_top -- end-to-end test of the single-column NoC shell at its
// default size (3 routers, 6 VRs, 32-bit payloads), set up like the
// multi-tenant case study: VR0..VR5 belong to VI 1, 2, 3, 3, 4, 5.
//
// Phases, each checked against a scoreboard of expected payloads:
//  A  VR2 streams to VR3 (same VI, same router, West -> East): first word
//     after 5 cycles, then one word per cycle.
//  B  VR0 (VI 1) sends to VR5 (VI 5): every packet is dropped at VR5.
//  C  the hypervisor moves VR5 to VI 3 (elasticity); VR2 and VR5 exchange
//     streams across two routers: first word after 7 cycles.
//  D  five VRs send to VR2 at once: round-robin collisions in routers 0 and
//     1, a stalled router-to-router link, full VR FIFOs stalling tenants;
//     VI 3 packets arrive in order, the others are dropped at VR2.
//  E  direct links: VR3 -> VR5 and VR5 -> VR3 (same VI) carry a word per
//     cycle; VR2 -> VR4 (different VI) is blocked.
// Each mechanism is counted and must occur at least once.
module tb_mt_noc_top;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NV = 6;
  localparam int DW = 32;

  logic cfg_we; logic [2:0] cfg_vr; cfg_addr_e cfg_addr; logic [15:0] cfg_wdata;
  logic [NV-1:0][DW-1:0] user_tx_tdata, user_rx_data;
  logic [NV-1:0] user_tx_tvalid, user_tx_tready, user_rx_valid, user_rx_drop;
  logic [NV-1:0][DW-1:0] dln_tx_tdata, dln_rx_tdata, dls_tx_tdata, dls_rx_tdata;
  logic [NV-1:0] dln_tx_tvalid, dln_tx_tready, dln_rx_tvalid, dln_rx_tready;
  logic [NV-1:0] dls_tx_tvalid, dls_tx_tready, dls_rx_tvalid, dls_rx_tready;

  mt_noc_top dut (.*);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  int          vi_of [NV];
  int          dst_of [NV];                 // destination VR of each VR
  logic [31:0] tx_q [NV][$];                // payloads each tenant still sends
  logic [31:0] exp_q [NV][NV][$];           // [src][dst] expected deliveries
  int          exp_drop [NV];
  int          got_drop [NV];
  int          rx_cycle [NV][$];            // delivery cycles per VR
  int          tx_cycle [NV][$];            // acceptance cycles per VR
  int          cycle = 0;
  int          seq = 0;

  // mechanisms
  int n_collide = 0, n_link_stall = 0, n_fifo_full = 0, n_drop = 0;
  int n_dl_pass = 0, n_dl_block = 0, n_reconfig = 0, n_multihop = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // Tenant transmit side.
  always @(posedge clk) if (rst_n)
    for (int v = 0; v < NV; v++) begin
      if (user_tx_tvalid[v] && user_tx_tready[v]) begin
        void'(tx_q[v].pop_front());
        tx_cycle[v].push_back(cycle);
      end
      if (user_tx_tvalid[v] && !user_tx_tready[v]) n_fifo_full++;
    end
  always @(negedge clk) begin
    #1;
    for (int v = 0; v < NV; v++) begin
      user_tx_tvalid[v] = (tx_q[v].size() != 0);
      user_tx_tdata[v]  = (tx_q[v].size() != 0) ? tx_q[v][0] : '0;
    end
  end

  // Tenant receive side.
  always @(posedge clk) if (rst_n)
    for (int v = 0; v < NV; v++) begin
      if (user_rx_valid[v]) begin
        int s;
        s = int'(user_rx_data[v][31:28]);
        rx_cycle[v].push_back(cycle);
        chk(s < NV && exp_q[s][v].size() != 0, $sformatf("VR%0d: unexpected payload %h", v, user_rx_data[v]));
        if (s < NV && exp_q[s][v].size() != 0) begin
          logic [31:0] e;
          e = exp_q[s][v].pop_front();
          chk(user_rx_data[v] == e, $sformatf("VR%0d got %h exp %h", v, user_rx_data[v], e));
        end
      end
      if (user_rx_drop[v]) begin got_drop[v]++; n_drop++; end
    end

  // Internal events, observed only to count mechanisms.
  int coll0 [3];
  int coll1 [4];
  for (genvar o = 0; o < 3; o++) begin : g_c0
    initial coll0[o] = 0;
    always @(posedge clk)
      if (rst_n && dut.g_router[0].u_router.c_load[o] && dut.g_router[0].u_router.g_alloc[o].u_alloc.step)
        coll0[o]++;
  end
  for (genvar o = 0; o < 4; o++) begin : g_c1
    initial coll1[o] = 0;
    always @(posedge clk)
      if (rst_n && dut.g_router[1].u_router.c_load[o] && dut.g_router[1].u_router.g_alloc[o].u_alloc.step)
        coll1[o]++;
  end
  always @(posedge clk) if (rst_n) begin
    if (!dut.r_out_empty[0][DIR_N] && !dut.r_out_rd_en[0][DIR_N]) n_link_stall++;
    if (!dut.r_out_empty[2][DIR_S] && !dut.r_out_rd_en[2][DIR_S]) n_link_stall++;
  end

  // ---------------------------------------------------------------- helpers
  task automatic cfg(int v, cfg_addr_e a, int val);
    @(negedge clk);
    cfg_we = 1; cfg_vr = 3'(v); cfg_addr = a; cfg_wdata = 16'(val);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic setup_vr(int v, int vi, int dst);
    cfg(v, CFG_VI_ID, vi);
    cfg(v, CFG_ROUTER_ID, dst / 2);
    cfg(v, CFG_VR_ID, dst % 2);
    vi_of[v] = vi; dst_of[v] = dst;
  endtask

  // Queue n payloads from src; they go to dst_of[src].
  task automatic send(int src, int n);
    for (int i = 0; i < n; i++) begin
      logic [31:0] p;
      p = {4'(src), 28'(seq++)};
      tx_q[src].push_back(p);
      if (vi_of[dst_of[src]] == vi_of[src]) exp_q[src][dst_of[src]].push_back(p);
      else exp_drop[dst_of[src]]++;
    end
  endtask

  task automatic wait_idle(int cycles);
    repeat (cycles) @(negedge clk);
  endtask

  function automatic int all_pending();
    int n = 0;
    for (int s = 0; s < NV; s++) begin
      n += tx_q[s].size();
      for (int d = 0; d < NV; d++) n += exp_q[s][d].size();
    end
    return n;
  endfunction

  task automatic clear_times();
    for (int v = 0; v < NV; v++) begin rx_cycle[v].delete(); tx_cycle[v].delete(); end
  endtask

  // ---------------------------------------------------------------- test
  initial begin
    cfg_we = 0; cfg_vr = 0; cfg_addr = CFG_ROUTER_ID; cfg_wdata = 0;
    user_tx_tvalid = '0; user_tx_tdata = '0;
    dln_tx_tdata = '0; dln_tx_tvalid = '0; dln_rx_tready = '1;
    dls_tx_tdata = '0; dls_tx_tvalid = '0; dls_rx_tready = '1;
    for (int v = 0; v < NV; v++) begin exp_drop[v] = 0; got_drop[v] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // Case-study allocation: VR0..5 -> VI 1,2,3,3,4,5.
    setup_vr(0, 1, 5);
    setup_vr(1, 2, 0);
    setup_vr(2, 3, 3);
    setup_vr(3, 3, 2);
    setup_vr(4, 4, 5);
    setup_vr(5, 5, 4);

    // ---- A: VR2 -> VR3 stream ---------------------------------------------
    clear_times();
    send(2, 64);
    wait_idle(90);
    chk(all_pending() == 0, "A: stream delivered");
    chk(rx_cycle[3].size() == 64, "A: 64 words");
    if (rx_cycle[3].size() == 64 && tx_cycle[2].size() == 64) begin
      chk(rx_cycle[3][0] - tx_cycle[2][0] == 5, $sformatf("A: first word latency %0d (exp 5)", rx_cycle[3][0] - tx_cycle[2][0]));
      chk(rx_cycle[3][63] - rx_cycle[3][0] == 63, "A: one word per cycle");
    end

    // ---- B: isolation -------------------------------------------------------
    send(0, 16);
    wait_idle(60);
    chk(got_drop[5] == 16 && exp_drop[5] == 16, $sformatf("B: 16 packets dropped at VR5 (%0d)", got_drop[5]));
    chk(rx_cycle[5].size() == 0, "B: nothing delivered to VR5");

    // ---- C: elasticity, VI3 gets VR5 ---------------------------------------
    setup_vr(5, 3, 2);
    n_reconfig++;
    setup_vr(2, 3, 5);
    clear_times();
    send(2, 16);
    send(5, 16);
    wait_idle(60);
    chk(all_pending() == 0, "C: both streams delivered");
    if (rx_cycle[5].size() == 16 && rx_cycle[2].size() == 16) begin
      n_multihop++;
      chk(rx_cycle[5][0] - tx_cycle[2][0] == 7, $sformatf("C: VR2->VR5 latency %0d (exp 7)", rx_cycle[5][0] - tx_cycle[2][0]));
      chk(rx_cycle[2][0] - tx_cycle[5][0] == 7, $sformatf("C: VR5->VR2 latency %0d (exp 7)", rx_cycle[2][0] - tx_cycle[5][0]));
      chk(rx_cycle[5][15] - rx_cycle[5][0] == 15, "C: one word per cycle over two routers");
    end else chk(0, "C: stream sizes");

    // ---- D: contention on VR2 ------------------------------------------------
    for (int v = 0; v < NV; v++) if (v != 2) setup_vr(v, vi_of[v], 2);
    begin
      int d0;
      d0 = got_drop[2];
      for (int v = 0; v < NV; v++) if (v != 2) send(v, 40);
      wait_idle(400);
      chk(all_pending() == 0, "D: all VI3 traffic delivered");
      chk(got_drop[2] - d0 == 120 && exp_drop[2] == 120, $sformatf("D: 120 foreign packets dropped (%0d)", got_drop[2] - d0));
    end

    // ---- E: direct links -----------------------------------------------------
    begin
      automatic int n_rx5 = 0, n_rx3 = 0, n_rx4 = 0;
      logic [31:0] exp5 [$];
      logic [31:0] exp3 [$];
      fork
        begin
          for (int i = 0; i < 20; i++) begin
            @(negedge clk);
            dln_tx_tvalid = '0; dls_tx_tvalid = '0;
            dln_tx_tvalid[3] = 1; dln_tx_tdata[3] = 32'(32'h3000 + i);
            dls_tx_tvalid[5] = 1; dls_tx_tdata[5] = 32'(32'h5000 + i);
            dln_tx_tvalid[2] = 1; dln_tx_tdata[2] = 32'(32'h2000 + i);
            exp5.push_back(32'(32'h3000 + i));
            exp3.push_back(32'(32'h5000 + i));
            @(posedge clk);
            chk(dln_tx_tready[3] && dls_tx_tready[5], "E: links take a word every cycle");
            if (dut.g_dl[2].g_up.blocked_n) n_dl_block++;
          end
          @(negedge clk);
          dln_tx_tvalid = '0; dls_tx_tvalid = '0;
        end
        begin
          int first5;
          first5 = -1;
          repeat (25) begin
            @(posedge clk);
            if (dln_rx_tvalid[5]) begin
              chk(exp5.size() != 0 && dln_rx_tdata[5] == exp5[0], "E: VR3 -> VR5 data");
              if (exp5.size() != 0) void'(exp5.pop_front());
              if (first5 < 0) first5 = cycle;
              n_rx5++; n_dl_pass++;
            end
            if (dls_rx_tvalid[3]) begin
              chk(exp3.size() != 0 && dls_rx_tdata[3] == exp3[0], "E: VR5 -> VR3 data");
              if (exp3.size() != 0) void'(exp3.pop_front());
              n_rx3++; n_dl_pass++;
            end
            if (dln_rx_tvalid[4]) n_rx4++;
          end
        end
      join
      chk(n_rx5 == 20 && n_rx3 == 20 && exp5.size() == 0, $sformatf("E: 20 words each way (%0d, %0d)", n_rx5, n_rx3));
      chk(n_rx4 == 0, "E: VR2 -> VR4 blocked (different VI)");
    end

    // ---- totals -----------------------------------------------------------------
    foreach (coll0[o]) n_collide += coll0[o];
    foreach (coll1[o]) n_collide += coll1[o];
    for (int v = 0; v < NV; v++) chk(got_drop[v] == exp_drop[v], $sformatf("VR%0d drops %0d exp %0d", v, got_drop[v], exp_drop[v]));
    $display("mechanisms: collisions=%0d link_stalls=%0d fifo_full=%0d drops=%0d multihop=%0d reconfig=%0d dl_pass=%0d dl_block=%0d",
             n_collide, n_link_stall, n_fifo_full, n_drop, n_multihop, n_reconfig, n_dl_pass, n_dl_block);
    chk(n_collide > 0, "mechanism: arbitration between colliding packets");
    chk(n_link_stall > 0, "mechanism: router-to-router link stall");
    chk(n_fifo_full > 0, "mechanism: full VR FIFO stalls tenant");
    chk(n_drop > 0, "mechanism: access monitor drop");
    chk(n_multihop > 0, "mechanism: multi-hop delivery");
    chk(n_reconfig > 0, "mechanism: VR reassigned to another VI");
    chk(n_dl_pass > 0, "mechanism: direct link transfer");
    chk(n_dl_block > 0, "mechanism: direct link blocked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
