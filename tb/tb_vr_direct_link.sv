// tb_vr_direct_link -- VR-to-VR stream.
// Checks one word per clock with one cycle latency between VRs of the same
// VI, back-pressure from the sink, and that the link discards words and
// raises blocked when the two VRs belong to different VIs.
module tb_vr_direct_link;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [9:0] a_vi, b_vi;
  logic [31:0] s_tdata, m_tdata; logic s_tvalid, s_tready, m_tvalid, m_tready, blocked;

  vr_direct_link dut (.clk, .rst_n, .a_vi_id(a_vi), .b_vi_id(b_vi), .s_tdata, .s_tvalid, .s_tready,
    .m_tdata, .m_tvalid, .m_tready, .blocked);

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

  logic [31:0] q [$];
  logic acc;
  int got = 0;

  initial begin
    a_vi = 10'd7; b_vi = 10'd7; s_tvalid = 0; s_tdata = 0; m_tready = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(negedge clk);
    chk(!blocked, "same VI: open");
    for (int i = 0; i < 10; i++) begin
      s_tvalid = 1; s_tdata = 32'(1000 + i);
      @(negedge clk);
      chk(m_tvalid && m_tdata == 32'(1000 + i), $sformatf("word %0d one cycle later", i));
    end
    s_tvalid = 0;
    @(negedge clk);
    // random with back-pressure
    for (int c = 0; c < 1500; c++) begin
      if (m_tvalid && m_tready) begin
        chk(q.size() != 0 && m_tdata == q[0], "random order");
        if (q.size() != 0) void'(q.pop_front());
        got++;
      end
      if (s_tvalid && s_tready) q.push_back(s_tdata);
      acc = s_tvalid && s_tready;
      @(posedge clk); #1;
      if (!s_tvalid || acc) begin s_tvalid = 1'($urandom); s_tdata = $urandom; end
      m_tready = ($urandom % 3 != 0);
      @(negedge clk);
    end
    chk(got > 300, "words delivered");
    // different VI: blocked
    s_tvalid = 0; m_tready = 1;
    repeat (3) @(negedge clk);
    b_vi = 10'd8;
    @(negedge clk);
    chk(blocked, "different VI: blocked");
    for (int i = 0; i < 5; i++) begin
      s_tvalid = 1; s_tdata = 32'(i);
      @(negedge clk);
      chk(!m_tvalid && s_tready, "blocked link discards");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
