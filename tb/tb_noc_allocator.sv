// tb_noc_allocator -- three-source allocator (4-port router line).
// Checks: simultaneous requests from sources 0,1,2 are granted one per cycle
// in the order 0,1,2 and a second wave again in 0,1,2; a lone request is
// granted at once; nothing is granted while the line is not ready; random
// traffic against a reference round-robin model (one-hot RD_EN, sel, load).
module tb_noc_allocator;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [2:0] req, rd_en;
  logic       ready, load, step;
  logic [1:0] sel;

  noc_allocator #(.N_IN(3)) dut (.clk, .rst_n, .req, .ready, .rd_en, .sel, .load, .step);

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive a wave of 3 pending sources; each granted source drops its request.
  task automatic wave(int ref_order[3]);
    logic [2:0] pend = 3'b111;
    for (int i = 0; i < 3; i++) begin
      req = pend; ready = 1'b1;
      #1;
      chk(load && rd_en == (3'b1 << ref_order[i]) && int'(sel) == ref_order[i],
          $sformatf("wave grant %0d: got rd_en=%b exp src %0d", i, rd_en, ref_order[i]));
      pend[sel] = 1'b0;
      @(posedge clk); #1;
    end
  endtask

  int ptr_model;

  initial begin
    req = '0; ready = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wave('{0, 1, 2});
    wave('{0, 1, 2});
    // lone request from source 1
    req = 3'b010; ready = 1'b1; #1;
    chk(load && rd_en == 3'b010 && !step, "lone request");
    @(posedge clk); #1;
    // not ready: no grant
    req = 3'b111; ready = 1'b0; #1;
    chk(!load && rd_en == 3'b000, "no grant when not ready");
    @(posedge clk); #1;
    // reference model: counter = granted + 1
    ptr_model = 2;
    for (int i = 0; i < 400; i++) begin
      int exp;
      req = 3'($urandom); ready = 1'($urandom % 4 != 0);
      #1;
      exp = -1;
      for (int k = 0; k < 3; k++) if (exp < 0 && req[(ptr_model + k) % 3]) exp = (ptr_model + k) % 3;
      if (exp < 0 || !ready) chk(!load && rd_en == 0, "idle");
      else begin
        chk(load && rd_en == (3'b1 << exp), $sformatf("random grant exp %0d got %b", exp, rd_en));
        ptr_model = (exp + 1) % 3;
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
