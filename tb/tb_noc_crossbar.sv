// tb_noc_crossbar -- 4-port and 3-port crossbars with 8-bit flits.
// Checks that output line o with select k delivers input (o+1+k) mod N two
// clock edges after load, that back-to-back loads leave one per cycle, that
// a line whose output is not popped stops being ready after two flits and
// keeps its data, and random traffic against a reference pipeline model.
module tb_noc_crossbar;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int N = 4;
  logic [N-1:0][7:0] in_flit, out_flit;
  logic [N-1:0][1:0] sel;
  logic [N-1:0]      load, out_pop, ready, out_valid;

  noc_crossbar #(.FLIT_W(8), .NPORTS(N)) dut (
    .clk, .rst_n, .in_flit, .sel, .load, .out_pop, .ready, .out_flit, .out_valid);

  logic [2:0][7:0] in3, out3;
  logic [2:0]      sel3, load3, pop3, ready3, valid3;
  noc_crossbar #(.FLIT_W(8), .NPORTS(3)) dut3 (
    .clk, .rst_n, .in_flit(in3), .sel(sel3), .load(load3), .out_pop(pop3),
    .ready(ready3), .out_flit(out3), .out_valid(valid3));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte unsigned q [N][$];
  byte unsigned q3 [3][$];

  initial begin
    in_flit = '0; sel = '0; load = '0; out_pop = '0;
    in3 = '0; sel3 = '0; load3 = '0; pop3 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // Select mapping and 2-cycle latency, all lines at once.
    for (int k = 0; k < N - 1; k++) begin
      for (int i = 0; i < N; i++) in_flit[i] = 8'(16 * (k + 1) + i);
      for (int o = 0; o < N; o++) begin sel[o] = 2'(k); load[o] = 1'b1; end
      out_pop = '1;
      @(posedge clk); #1;
      load = '0;
      for (int o = 0; o < N; o++) chk(!out_valid[o], "not yet after one edge");
      @(posedge clk); #1;
      for (int o = 0; o < N; o++)
        chk(out_valid[o] && out_flit[o] == 8'(16 * (k + 1) + (o + 1 + k) % N),
            $sformatf("line %0d sel %0d got %h", o, k, out_flit[o]));
    end
    @(posedge clk); #1;
    // 3-port: two switches per line.
    for (int k = 0; k < 2; k++) begin
      for (int i = 0; i < 3; i++) in3[i] = 8'(8'hA0 + 4 * k + i);
      for (int o = 0; o < 3; o++) begin sel3[o] = 1'(k); load3[o] = 1'b1; end
      pop3 = '1;
      @(posedge clk); #1; load3 = '0;
      @(posedge clk); #1;
      for (int o = 0; o < 3; o++)
        chk(valid3[o] && out3[o] == 8'(8'hA0 + 4 * k + (o + 1 + k) % 3), "3-port mapping");
    end
    // Back-pressure: line 0 not popped.
    out_pop = '0; sel[0] = 2'd0;
    for (int i = 0; i < 4; i++) begin
      in_flit[1] = 8'(8'h50 + i);
      load[0] = ready[0];
      @(posedge clk); #1;
    end
    load[0] = 1'b0;
    chk(!ready[0], "line stalls after two flits");
    chk(out_valid[0] && out_flit[0] == 8'h50, "held flit is the first");
    out_pop[0] = 1'b1; @(posedge clk); #1;
    chk(out_valid[0] && out_flit[0] == 8'h51, "second flit follows");
    @(posedge clk); #1;
    chk(!out_valid[0], "only two flits were taken");
    out_pop = '0;
    // Random traffic vs queue model on the 4-port crossbar.
    for (int cyc = 0; cyc < 600; cyc++) begin
      for (int o = 0; o < N; o++) begin
        in_flit[o] = 8'($urandom);
        sel[o]     = 2'($urandom % 3);
      end
      #1;
      for (int o = 0; o < N; o++) begin
        load[o]    = ready[o] && ($urandom % 2 == 1);
        out_pop[o] = out_valid[o] && ($urandom % 3 != 0);
      end
      #1;
      for (int o = 0; o < N; o++) begin
        if (load[o]) q[o].push_back(in_flit[(o + 1 + int'(sel[o])) % N]);
        if (out_pop[o]) begin
          byte unsigned e;
          e = q[o].pop_front();
          chk(out_flit[o] == e, $sformatf("random line %0d got %h exp %h", o, out_flit[o], e));
        end
      end
      @(posedge clk); #1;
      load = '0; out_pop = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
