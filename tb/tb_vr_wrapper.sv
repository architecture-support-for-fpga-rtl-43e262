// tb_vr_wrapper -- header insertion on outgoing payloads.
// Checks the packet = {VI_ID, VR_ID, ROUTER_ID, payload} with the header
// fields in the published order, one cycle from payload to packet, one
// packet per cycle, and that a stalled output holds its packet while the
// payload side sees tready low.
module tb_vr_wrapper;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0] rid; logic vr; logic [9:0] vi;
  logic [31:0] u_tdata; logic u_tvalid, u_tready;
  logic [47:0] m_tdata; logic m_tvalid, m_tready;

  vr_wrapper dut (.clk, .rst_n, .dst_router_id(rid), .dst_vr_id(vr), .vi_id(vi),
    .u_tdata, .u_tvalid, .u_tready, .m_tdata, .m_tvalid, .m_tready);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [47:0] q [$];
  logic acc;

  initial begin
    rid = 5'd19; vr = 1'b1; vi = 10'h2A5;
    u_tvalid = 0; u_tdata = '0; m_tready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    u_tvalid = 1; u_tdata = 32'hDEADBEEF;
    @(negedge clk);
    u_tdata = 32'h01234567;
    // bit positions: vi 47:38, vr 37, router 36:32, data 31:0
    chk(m_tvalid && m_tdata[47:38] == 10'h2A5 && m_tdata[37] == 1'b1 &&
        m_tdata[36:32] == 5'd19 && m_tdata[31:0] == 32'hDEADBEEF, $sformatf("packet %h", m_tdata));
    @(negedge clk);
    chk(m_tvalid && m_tdata[31:0] == 32'h01234567, "back-to-back packet");
    m_tready = 0; u_tdata = 32'h55;
    #1;
    chk(!u_tready, "tready low while output stalled");
    @(negedge clk);
    chk(m_tvalid && m_tdata[31:0] == 32'h01234567, "packet held while stalled");
    m_tready = 1;
    @(negedge clk);
    u_tvalid = 0;
    chk(m_tvalid && m_tdata[31:0] == 32'h55, "stalled payload follows");
    @(negedge clk);
    chk(!m_tvalid, "idle");
    // random, with header changes
    for (int c = 0; c < 2000; c++) begin
      if (m_tvalid && m_tready) begin
        chk(q.size() != 0 && m_tdata == q[0], "random stream");
        if (q.size() != 0) void'(q.pop_front());
      end
      if (u_tvalid && u_tready) q.push_back({vi, vr, rid, u_tdata});
      acc = u_tvalid && u_tready;
      @(posedge clk); #1;
      if (!u_tvalid || acc) begin
        u_tvalid = ($urandom % 3 != 0); u_tdata = $urandom;
        rid = 5'($urandom); vr = 1'($urandom); vi = 10'($urandom);
      end
      m_tready = ($urandom % 4 != 0);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
