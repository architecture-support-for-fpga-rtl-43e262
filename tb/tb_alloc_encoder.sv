// tb_alloc_encoder -- checks the 2-input truth table of the request encoder
// exhaustively (including the alternation of SELECT for two requests, via
// the counter input) and the 3-input extension against a reference search.
module tb_alloc_encoder;
  int checks = 0, failures = 0;

  logic [1:0] req2;  logic ptr2;        logic any2, step2; logic sel2;
  logic [2:0] req3;  logic [1:0] ptr3;  logic any3, step3; logic [1:0] sel3;

  alloc_encoder #(.N_IN(2)) u2 (.req(req2), .ptr(ptr2), .any(any2), .step(step2), .sel(sel2));
  alloc_encoder #(.N_IN(3)) u3 (.req(req3), .ptr(ptr3), .any(any3), .step(step3), .sel(sel3));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Truth table (INPUT 0 = req[0], INPUT 1 = req[1]).
    for (int p = 0; p < 2; p++) begin
      ptr2 = 1'(p);
      req2 = 2'b00; #1; chk(!any2 && !step2, "00 -> nothing");
      req2 = 2'b10; #1; chk(any2 && !step2 && sel2 == 1'b1, "in1 only -> step0 sel1");
      req2 = 2'b01; #1; chk(any2 && !step2 && sel2 == 1'b0, "in0 only -> step0 sel0");
      req2 = 2'b11; #1; chk(any2 && step2 && sel2 == 1'(p), "both -> step1 sel=counter");
    end
    // 3 inputs: reference = first requester at or after ptr.
    for (int r = 0; r < 8; r++) begin
      for (int p = 0; p < 3; p++) begin
        int exp_sel, n;
        req3 = 3'(r); ptr3 = 2'(p); #1;
        n = $countones(req3);
        exp_sel = -1;
        for (int k = 0; k < 3; k++)
          if (exp_sel < 0 && req3[(p + k) % 3]) exp_sel = (p + k) % 3;
        chk(any3 == (n != 0), $sformatf("any r=%b p=%0d", req3, p));
        chk(step3 == (n > 1), $sformatf("step r=%b p=%0d", req3, p));
        if (n != 0) chk(int'(sel3) == exp_sel, $sformatf("sel r=%b p=%0d got %0d exp %0d", req3, p, sel3, exp_sel));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
