// tb_vr_config_regs -- hypervisor writes to the three VR registers.
// Checks reset values, that each address writes only its own register with
// the right width, that address 3 and cfg_we = 0 change nothing, and random
// writes against a model.
module tb_vr_config_regs;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we; cfg_addr_e cfg_addr; logic [15:0] cfg_wdata;
  logic [4:0] dst_router_id; logic dst_vr_id; logic [9:0] vi_id;

  vr_config_regs dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .dst_router_id, .dst_vr_id, .vi_id);

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

  logic [4:0] m_rid; logic m_vr; logic [9:0] m_vi;

  initial begin
    cfg_we = 0; cfg_addr = CFG_ROUTER_ID; cfg_wdata = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(dst_router_id == 0 && dst_vr_id == 0 && vi_id == 0, "reset values");
    cfg_we = 1; cfg_addr = CFG_ROUTER_ID; cfg_wdata = 16'hFFF7; @(negedge clk);
    chk(dst_router_id == 5'd23 && dst_vr_id == 0 && vi_id == 0, "ROUTER_ID write");
    cfg_addr = CFG_VR_ID; cfg_wdata = 16'h0003; @(negedge clk);
    chk(dst_router_id == 5'd23 && dst_vr_id == 1 && vi_id == 0, "VR_ID write");
    cfg_addr = CFG_VI_ID; cfg_wdata = 16'hF3FF; @(negedge clk);
    chk(vi_id == 10'h3FF && dst_router_id == 5'd23 && dst_vr_id == 1, "VI_ID write");
    cfg_addr = cfg_addr_e'(2'd3); cfg_wdata = 16'h0000; @(negedge clk);
    chk(vi_id == 10'h3FF && dst_router_id == 5'd23 && dst_vr_id == 1, "address 3 ignored");
    cfg_we = 0; cfg_addr = CFG_VI_ID; @(negedge clk);
    chk(vi_id == 10'h3FF, "no write without cfg_we");
    m_rid = dst_router_id; m_vr = dst_vr_id; m_vi = vi_id;
    for (int i = 0; i < 300; i++) begin
      cfg_we = 1'($urandom); cfg_addr = cfg_addr_e'($urandom); cfg_wdata = 16'($urandom);
      if (cfg_we) case (cfg_addr)
        CFG_ROUTER_ID: m_rid = cfg_wdata[4:0];
        CFG_VR_ID:     m_vr  = cfg_wdata[0];
        CFG_VI_ID:     m_vi  = cfg_wdata[9:0];
        default: ;
      endcase
      @(negedge clk);
      chk(dst_router_id == m_rid && dst_vr_id == m_vr && vi_id == m_vi, "random writes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
