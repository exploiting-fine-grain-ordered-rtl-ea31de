// tb_xfer_net: random test of the inter-lane XFER routing network.
// Every cycle each lane offers a random request (or none) for a random destination
// lane, and each destination is randomly ready. For each destination the lowest
// requesting source lane must be routed and granted (if the destination is ready);
// all other requests must be refused and idle destinations must see no valid group.
module tb_xfer_net;
  import revel_pkg::*;
  xfer_t [NLANES-1:0] req, dst;
  logic [NLANES-1:0] gnt, dst_ready;
  xfer_net dut (.req, .gnt, .dst, .dst_ready);
  int checks = 0, failures = 0, n_conflict = 0;
  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask
  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int it = 0; it < 5000; it++) begin
      int win [NLANES];
      for (int s = 0; s < NLANES; s++) begin
        req[s] = '0;
        req[s].v = $urandom_range(0, 1);
        req[s].lane = 3'($urandom_range(0, 3));   // favour conflicts on lanes 0..3
        req[s].port = 3'($urandom);
        req[s].g.n = 4'($urandom_range(1, 8));
        req[s].g.data[0] = {32'(s), $urandom};
      end
      dst_ready = NLANES'($urandom);
      #1;
      for (int d = 0; d < NLANES; d++) begin
        int n;
        win[d] = -1; n = 0;
        for (int s = 0; s < NLANES; s++) if (req[s].v && req[s].lane == 3'(d)) begin n++; if (win[d] < 0) win[d] = s; end
        if (n > 1) n_conflict++;
        check("dst valid", dst[d].v, win[d] >= 0);
        if (win[d] >= 0) check("dst group", dst[d], req[win[d]]);
      end
      for (int s = 0; s < NLANES; s++)
        check("grant", gnt[s], req[s].v && win[req[s].lane] == s && dst_ready[req[s].lane]);
      #9;
    end
    checks++; if (n_conflict == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
