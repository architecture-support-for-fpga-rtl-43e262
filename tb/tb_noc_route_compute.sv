// tb_noc_route_compute -- checks the routing decision against an
// independent reference (destination router above -> North, below -> South,
// equal -> West/East by VR_ID) for routers 0, 2 and 31 and random headers,
// plus every (router_id, vr_id) combination for router 2.
module tb_noc_route_compute;
  import noc_pkg::*;

  int checks = 0, failures = 0;
  hdr_t h;
  dir_e d0, d2, d31;

  noc_route_compute #(.ROUTER_ID(0))  u0  (.hdr(h), .dir(d0));
  noc_route_compute #(.ROUTER_ID(2))  u2  (.hdr(h), .dir(d2));
  noc_route_compute #(.ROUTER_ID(31)) u31 (.hdr(h), .dir(d31));

  function automatic dir_e ref_dir(int unsigned me, hdr_t x);
    if (int'(x.router_id) > int'(me)) return DIR_N;
    if (int'(x.router_id) < int'(me)) return DIR_S;
    return x.vr_id ? DIR_E : DIR_W;
  endfunction

  task automatic check(dir_e got, dir_e exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s hdr=%h got=%s exp=%s", what, h, got.name(), exp.name());
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 32; r++) begin
      for (int v = 0; v < 2; v++) begin
        h = '{vi_id: 10'($urandom), vr_id: 1'(v), router_id: 5'(r)};
        #1;
        check(d2, ref_dir(2, h), "router2");
      end
    end
    // named cases
    h = '{vi_id: 10'd3, vr_id: 1'b0, router_id: 5'd2}; #1; check(d2, DIR_W, "W");
    h = '{vi_id: 10'd3, vr_id: 1'b1, router_id: 5'd2}; #1; check(d2, DIR_E, "E");
    h = '{vi_id: 10'd3, vr_id: 1'b1, router_id: 5'd3}; #1; check(d2, DIR_N, "N");
    h = '{vi_id: 10'd3, vr_id: 1'b0, router_id: 5'd1}; #1; check(d2, DIR_S, "S");
    for (int i = 0; i < 500; i++) begin
      h = hdr_t'($urandom);
      #1;
      check(d0,  ref_dir(0, h),  "router0");
      check(d2,  ref_dir(2, h),  "router2");
      check(d31, ref_dir(31, h), "router31");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
