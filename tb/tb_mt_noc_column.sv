// tb_mt_noc_column -- random traffic through a taller column: six routers
// (two 3-port routers at the ends, four 4-port routers between them) and
// twelve virtual regions, so that packets cross up to five routers and
// several router-to-router links in a row.
//
// Each round the hypervisor port gives every VR a random destination (never
// itself) and a VI_ID of 1 or 2, then every tenant sends a random number of
// payloads with random gaps. A payload is expected at its destination, in
// order per sender, when both VRs belong to the same VI, and as a drop
// otherwise. Checked: every expected payload arrives once and unchanged,
// every other one is dropped, and none arrives sooner than the uncontended
// time, 5 cycles plus 2 per router hop. Long hops, drops and tenants stalled
// by a full FIFO must each occur.
module tb_mt_noc_column;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NR = 6;
  localparam int NV = 2 * NR;
  localparam int DW = 32;
  localparam int ROUNDS = 12;

  logic cfg_we; logic [3:0] cfg_vr; cfg_addr_e cfg_addr; logic [15:0] cfg_wdata;
  logic [NV-1:0][DW-1:0] user_tx_tdata, user_rx_data;
  logic [NV-1:0] user_tx_tvalid, user_tx_tready, user_rx_valid, user_rx_drop;
  logic [NV-1:0][DW-1:0] dln_tx_tdata, dln_rx_tdata, dls_tx_tdata, dls_rx_tdata;
  logic [NV-1:0] dln_tx_tvalid, dln_tx_tready, dln_rx_tvalid, dln_rx_tready;
  logic [NV-1:0] dls_tx_tvalid, dls_tx_tready, dls_rx_tvalid, dls_rx_tready;

  mt_noc_top #(.NUM_ROUTERS(NR)) dut (.*);

  // Direct links are not used here.
  assign dln_tx_tdata = '0; assign dln_tx_tvalid = '0; assign dln_rx_tready = '1;
  assign dls_tx_tdata = '0; assign dls_tx_tvalid = '0; assign dls_rx_tready = '1;

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

  int          vi_of [NV];
  int          dst_of [NV];
  logic [31:0] tx_q [NV][$];
  logic [31:0] exp_q [NV][NV][$];
  int          sent_at [NV][$];           // acceptance cycle, by payload order
  int          first_seq [NV];            // sequence number of sent_at[v][0]
  int          exp_drop = 0, got_drop = 0;
  int          cycle = 0;
  int          seq [NV];
  int          n_long = 0, n_full = 0, n_rx = 0, max_hops_seen = 0;
  int          pace [NV];                 // per VR: percent of cycles with tvalid

  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (rst_n)
    for (int v = 0; v < NV; v++) begin
      if (user_tx_tvalid[v] && user_tx_tready[v]) begin
        void'(tx_q[v].pop_front());
        sent_at[v].push_back(cycle);
      end
      if (user_tx_tvalid[v] && !user_tx_tready[v]) n_full++;
      if (user_rx_valid[v]) begin
        int s, n, hops;
        s = int'(user_rx_data[v][31:28]);
        n = int'(user_rx_data[v][27:0]);
        chk(s < NV && exp_q[s][v].size() != 0 && exp_q[s][v][0] == user_rx_data[v],
            $sformatf("VR%0d: payload %h expected next", v, user_rx_data[v]));
        if (s < NV && exp_q[s][v].size() != 0) void'(exp_q[s][v].pop_front());
        if (s < NV) begin
          hops = (s / 2 > v / 2) ? s / 2 - v / 2 : v / 2 - s / 2;
          if (hops > max_hops_seen) max_hops_seen = hops;
          if (hops >= 2) n_long++;
          chk(n - first_seq[s] < sent_at[s].size() &&
              cycle - sent_at[s][n - first_seq[s]] >= 5 + 2 * hops,
              $sformatf("VR%0d -> VR%0d: no faster than %0d cycles", s, v, 5 + 2 * hops));
        end
        n_rx++;
      end
      if (user_rx_drop[v]) got_drop++;
    end

  always @(negedge clk) begin
    #1;
    for (int v = 0; v < NV; v++) begin
      user_tx_tvalid[v] = (tx_q[v].size() != 0) && (($urandom % 100) < pace[v]);
      user_tx_tdata[v]  = (tx_q[v].size() != 0) ? tx_q[v][0] : '0;
    end
  end

  task automatic cfg(int v, cfg_addr_e a, int val);
    @(negedge clk);
    cfg_we = 1; cfg_vr = 4'(v); cfg_addr = a; cfg_wdata = 16'(val);
    @(negedge clk);
    cfg_we = 0;
  endtask

  initial begin
    cfg_we = 0; cfg_vr = '0; cfg_addr = CFG_ROUTER_ID; cfg_wdata = '0;
    user_tx_tvalid = '0; user_tx_tdata = '0;
    for (int v = 0; v < NV; v++) begin seq[v] = 0; first_seq[v] = 0; pace[v] = 100; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int r = 0; r < ROUNDS; r++) begin
      // reconfigure while the network is idle
      for (int v = 0; v < NV; v++) begin
        int d;
        d = (v + 1 + $urandom % (NV - 1)) % NV;
        // every third round sends everyone to the far end of the column
        if (r % 3 == 2) d = (v < NV / 2) ? NV - 1 - (v % 2) : v % 2;
        vi_of[v] = 1 + $urandom % 2;
        dst_of[v] = d;
        cfg(v, CFG_VI_ID, vi_of[v]);
        cfg(v, CFG_ROUTER_ID, d / 2);
        cfg(v, CFG_VR_ID, d % 2);
      end
      for (int v = 0; v < NV; v++) begin
        int n;
        n = 5 + $urandom % 40;
        pace[v] = 30 + $urandom % 71;
        // restart the acceptance record for this round
        first_seq[v] = seq[v];
        sent_at[v].delete();
        for (int i = 0; i < n; i++) begin
          logic [31:0] p;
          p = {4'(v), 28'(seq[v]++)};
          tx_q[v].push_back(p);
          if (vi_of[dst_of[v]] == vi_of[v]) exp_q[v][dst_of[v]].push_back(p);
          else exp_drop++;
        end
      end
      begin
        automatic int busy = 1;
        while (busy != 0) begin
          @(negedge clk);
          busy = 0;
          for (int v = 0; v < NV; v++) busy += tx_q[v].size();
        end
      end
      repeat (40) @(negedge clk);
      for (int s = 0; s < NV; s++)
        for (int d = 0; d < NV; d++)
          chk(exp_q[s][d].size() == 0, $sformatf("round %0d: VR%0d -> VR%0d all delivered", r, s, d));
    end
    chk(got_drop == exp_drop, $sformatf("drops %0d expected %0d", got_drop, exp_drop));
    $display("delivered=%0d drops=%0d long_hops=%0d max_hops=%0d fifo_full=%0d",
             n_rx, got_drop, n_long, max_hops_seen, n_full);
    chk(n_long > 0 && max_hops_seen == NR - 1, "packets crossed the whole column");
    chk(got_drop > 0, "packets of other VIs dropped");
    chk(n_full > 0, "tenants stalled by full FIFOs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
