// tb_virtual_region -- one VR shell between a modelled tenant and router.
// Checks: register writes set the header of outgoing packets; a payload
// accepted in cycle t is at the router side (tx_empty low) in cycle t+2;
// a stream of payloads reaches the router in order under random RD_EN;
// the FIFO fills and stalls the tenant when the router does not read;
// incoming packets of the VR's VI reach the tenant without header, others
// are dropped.
module tb_virtual_region;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_e cfg_addr; logic [15:0] cfg_wdata; logic [9:0] vi_id;
  logic rx_valid; logic [47:0] rx_flit; logic tx_empty, tx_rd_en; logic [47:0] tx_flit;
  logic user_rx_valid, user_rx_drop; logic [31:0] user_rx_data;
  logic [31:0] user_tx_tdata; logic user_tx_tvalid, user_tx_tready;

  virtual_region #(.FIFO_DEPTH(4)) dut (.*);

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

  task automatic cfg(cfg_addr_e a, int v);
    cfg_we = 1; cfg_addr = a; cfg_wdata = 16'(v);
    @(negedge clk);
    cfg_we = 0;
  endtask

  logic [31:0] q [$];
  logic acc;
  int got = 0;

  initial begin
    cfg_we = 0; cfg_addr = CFG_ROUTER_ID; cfg_wdata = 0;
    rx_valid = 0; rx_flit = '0; tx_rd_en = 0; user_tx_tvalid = 0; user_tx_tdata = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    cfg(CFG_ROUTER_ID, 2); cfg(CFG_VR_ID, 1); cfg(CFG_VI_ID, 5);
    chk(vi_id == 10'd5, "VI_ID register");
    // latency t -> t+2
    user_tx_tvalid = 1; user_tx_tdata = 32'h11112222;
    @(negedge clk); user_tx_tvalid = 0;
    chk(tx_empty, "not yet at router after one cycle");
    @(negedge clk);
    chk(!tx_empty && tx_flit == {10'd5, 1'b1, 5'd2, 32'h11112222}, $sformatf("packet at router %h", tx_flit));
    tx_rd_en = 1; @(negedge clk); tx_rd_en = 0;
    chk(tx_empty, "popped");
    // fill: router not reading; wrapper register + 4 FIFO entries
    for (int i = 0; i < 8; i++) begin
      user_tx_tvalid = 1; user_tx_tdata = 32'(i);
      #1;
      if (user_tx_tready) q.push_back(user_tx_tdata);
      @(negedge clk);
    end
    chk(!user_tx_tready && q.size() == 5, $sformatf("tenant stalled by full FIFO (%0d taken)", q.size()));
    user_tx_tvalid = 0;
    // random drain and refill
    acc = 0;
    for (int c = 0; c < 1500; c++) begin
      tx_rd_en = !tx_empty && ($urandom % 2 == 1);
      if (tx_rd_en) begin
        chk(q.size() != 0 && tx_flit == {10'd5, 1'b1, 5'd2, q[0]}, "stream order");
        if (q.size() != 0) void'(q.pop_front());
        got++;
      end
      if (!user_tx_tvalid || acc) begin
        user_tx_tvalid = 1'($urandom); user_tx_tdata = $urandom;
      end
      #1;
      acc = user_tx_tvalid && user_tx_tready;
      if (acc) q.push_back(user_tx_tdata);
      @(negedge clk);
    end
    chk(got > 300, "stream moved");
    user_tx_tvalid = 0; tx_rd_en = 0;
    // receive side
    rx_valid = 1; rx_flit = {10'd5, 1'b0, 5'd0, 32'h600D};
    @(negedge clk);
    chk(user_rx_valid && user_rx_data == 32'h600D && !user_rx_drop, "own VI packet delivered");
    rx_flit = {10'd6, 1'b0, 5'd0, 32'hBAD};
    @(negedge clk);
    rx_valid = 0;
    chk(!user_rx_valid && user_rx_drop, "other VI dropped");
    // elasticity: hypervisor moves the VR to another VI
    cfg(CFG_VI_ID, 6);
    rx_valid = 1;
    @(negedge clk);
    rx_valid = 0;
    chk(user_rx_valid && user_rx_data == 32'hBAD, "accepted after VI change");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
