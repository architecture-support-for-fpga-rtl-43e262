// tb_access_monitor -- admission by VI_ID.
// Checks that packets of the VR's VI reach the user side one cycle later
// with the header removed, and that packets of other VIs are dropped with
// the drop flag, for directed and random headers.
module tb_access_monitor;
  import noc_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [9:0] vi_id; logic in_valid; logic [47:0] in_flit;
  logic out_valid, drop; logic [31:0] out_data;

  access_monitor dut (.clk, .rst_n, .vi_id, .in_valid, .in_flit, .out_valid, .out_data, .drop);

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

  int n_ok = 0, n_drop = 0;

  initial begin
    vi_id = 10'd3; in_valid = 0; in_flit = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    in_valid = 1; in_flit = {10'd3, 1'b1, 5'd1, 32'hCAFE0001};
    @(negedge clk);
    chk(out_valid && !drop && out_data == 32'hCAFE0001, "own VI accepted, header stripped");
    in_flit = {10'd4, 1'b1, 5'd1, 32'hBAD00002};
    @(negedge clk);
    chk(!out_valid && drop, "other VI dropped");
    in_valid = 0;
    @(negedge clk);
    chk(!out_valid && !drop, "idle");
    // a VI differing in a single bit is foreign
    for (int b = 0; b < 10; b++) begin
      in_valid = 1; in_flit = {vi_id ^ (10'b1 << b), 6'd0, 32'(b)};
      @(negedge clk);
      chk(!out_valid && drop, $sformatf("VI differing in bit %0d dropped", b));
    end
    in_valid = 0;
    for (int c = 0; c < 2000; c++) begin
      logic       exp_ok, exp_drop;
      logic [31:0] exp_data;
      in_valid = 1'($urandom);
      in_flit  = {($urandom % 2) ? vi_id : 10'($urandom), 6'($urandom), 32'($urandom)};
      exp_ok   = in_valid && (in_flit[47:38] == vi_id);
      exp_drop = in_valid && (in_flit[47:38] != vi_id);
      exp_data = in_flit[31:0];
      @(negedge clk);
      chk(out_valid == exp_ok && drop == exp_drop, "random admission");
      if (exp_ok) begin chk(out_data == exp_data, "random payload"); n_ok++; end
      if (exp_drop) n_drop++;
    end
    chk(n_ok > 100 && n_drop > 100, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
