// tb_vr_interface -- AXI4-Stream into the VR FIFO, pull handshake out.
// Checks: a packet accepted in cycle t is at the head (EMPTY low) in cycle
// t+1; DEPTH packets fill the FIFO and drop tready; order is kept under
// random valid/read patterns against a queue model.
module tb_vr_interface;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int DW = 16, FW = HDR_W + DW, DEPTH = 4;
  logic [FW-1:0] s_tdata, data_out;
  logic s_tvalid, s_tready, empty, rd_en;

  vr_interface #(.DATA_W(DW), .DEPTH(DEPTH)) dut (.clk, .rst_n, .s_tdata, .s_tvalid, .s_tready,
    .empty, .data_out, .rd_en);

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

  logic [FW-1:0] q [$];
  logic acc = 1'b0;

  initial begin
    s_tvalid = 0; s_tdata = '0; rd_en = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(empty && s_tready, "empty after reset");
    // one packet: visible next cycle
    s_tvalid = 1; s_tdata = FW'(32'hABCD);
    @(negedge clk); s_tvalid = 0;
    chk(!empty && data_out == FW'(32'hABCD), "head visible one cycle after write");
    rd_en = 1; @(negedge clk); rd_en = 0;
    chk(empty, "empty after read");
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      s_tvalid = 1; s_tdata = FW'(i + 100);
      chk(s_tready, "ready while not full");
      @(negedge clk);
    end
    chk(!s_tready, "tready low when full");
    s_tvalid = 0;
    for (int i = 0; i < DEPTH; i++) begin
      chk(!empty && data_out == FW'(i + 100), $sformatf("drain %0d", i));
      rd_en = 1; @(negedge clk);
    end
    rd_en = 0;
    chk(empty, "drained");
    // random
    for (int c = 0; c < 2000; c++) begin
      if (!s_tvalid || acc) begin
        s_tvalid = ($urandom % 2 == 1);
        s_tdata  = FW'({$urandom, $urandom});
      end
      rd_en = !empty && ($urandom % 2 == 1);
      if (rd_en) begin
        chk(q.size() != 0 && data_out == q[0], "random order");
        if (q.size() != 0) void'(q.pop_front());
      end
      acc = s_tvalid && s_tready;
      if (acc) q.push_back(s_tdata);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
