// tb_xfer_unit: tests the XFER stream unit with behavioural output ports.
// Random XFER streams (random source port, destination lane and port, inductive
// row lengths ceil(n_p + j*s_p), reuse parameters) are issued; the testbench fills
// the source output ports with random words at random times and grants the bus at
// random. Every granted group is checked: destination lane/port, words in order
// from the source port, end-of-row tags at the expected positions, the reuse
// parameters on the first group only, and one completion (with the right source
// port, destination lane and port) per stream.
module tb_xfer_unit;
  import revel_pkg::*;
  import revel_tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic issue_valid = 0, issue_ready, gnt = 0, done;
  cmd_t issue_cmd = '0;
  logic [NOPORT-1:0][6:0] op_count;
  line_t [NOPORT-1:0] op_head;
  logic [NOPORT-1:0][3:0] op_pop;
  xfer_t req;
  logic [2:0] done_port, done_lane, done_dport;
  logic [7:0] active;
  xfer_unit dut (.*);

  int checks = 0, failures = 0, n_done = 0, n_groups = 0;
  word_t opq [NOPORT][$];
  int left [NOPORT];
  bit pending [NOPORT];              // a stream on this source port has not reported done                 // words still to be produced into each port
  typedef struct { int lane, port, nr, sr; bit first; int src; } sinfo_t;
  sinfo_t cur [NOPORT];              // active stream reading each source port
  bit    eor_q [NOPORT][$];          // expected end-of-row tags per source port
  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask
  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always_comb
    for (int p = 0; p < NOPORT; p++) begin
      op_count[p] = 7'(opq[p].size());
      op_head[p] = '0;
      for (int k = 0; k < LINE_W; k++) if (k < opq[p].size()) op_head[p][k] = opq[p][k];
    end
  always @(negedge clk) if (rst_n) begin
    gnt = $urandom_range(0, 2) != 0;
    for (int p = 0; p < NOPORT; p++)
      if (left[p] > 0 && opq[p].size() < 4 * port_words(p) && $urandom_range(0, 1)) begin
        opq[p].push_back({$urandom, $urandom}); left[p]--;
      end
  end
  always @(posedge clk) if (rst_n) begin
    if (req.v && gnt) begin
      int s;
      n_groups++;
      s = -1;
      for (int p = 0; p < NOPORT; p++) if (op_pop[p] != 0) s = p;
      check("one source popped", s >= 0, 1);
      if (s >= 0) begin
        check("pop = group size", op_pop[s], req.g.n);
        check("dest lane", req.lane, cur[s].lane);
        check("dest port", req.port, cur[s].port);
        check("cfg on first group only", req.cfg, cur[s].first);
        if (req.cfg) begin check("nr", req.nr, $unsigned(16'(cur[s].nr == 0 ? 256 : cur[s].nr * 256))); check("sr", $unsigned(req.sr), $unsigned(16'(cur[s].sr))); end
        cur[s].first = 0;
        for (int k = 0; k < int'(req.g.n); k++) begin
          bit e;
          check("data", req.g.data[k], opq[s][k]);
          e = eor_q[s].pop_front();
          // a row end may only be the last word of a group
          if (k < int'(req.g.n) - 1) check("row end inside group", e, 0);
          else check("eor", req.g.eor, e);
        end
        repeat (int'(req.g.n)) void'(opq[s].pop_front());
      end
    end else if (!gnt) begin
      for (int p = 0; p < NOPORT; p++) check("no pop without grant", op_pop[p], 0);
    end
    if (done) begin
      n_done++;
      pending[done_port] = 0;
      check("done lane", done_lane, cur[done_port].lane);
      check("done dport", done_dport, cur[done_port].port);
      check("stream finished", eor_q[done_port].size(), 0);
    end
  end
  initial begin
    for (int p = 0; p < NOPORT; p++) begin left[p] = 0; pending[p] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      cmd_t c;
      int p, tot;
      p = $urandom_range(0, 5);
      @(negedge clk);
      while (pending[p] || left[p] != 0 || opq[p].size() != 0 || eor_q[p].size() != 0 || active != 0 && $urandom_range(0, 3) == 0) @(negedge clk);
      c = mk_cmd(CMD_XFER, 8'hFF, 0, $urandom_range(1, 10), $urandom_range(1, 4), 0, 0, -$urandom_range(0, 3) * 128, p,
                 $urandom_range(0, 255), -$urandom_range(0, 100));
      c.port2 = 3'($urandom); c.dlane = 3'($urandom);
      tot = 0;
      for (int j = 0; j < int'(c.n_j); j++) begin
        int len;
        len = int'(fx_ceil((CNT_W+FRAC+1)'(int'(c.n_i) * 256 + j * int'($signed(c.s_ji)))));
        for (int i = 0; i < len; i++) eor_q[p].push_back(i == len - 1);
        tot += len;
      end
      cur[p] = '{lane: c.dlane, port: c.port2, nr: c.n_c, sr: $signed(c.s_c), first: 1, src: p};
      left[p] = tot;
      pending[p] = 1;
      issue_cmd = c; issue_valid = 1;
      while (!issue_ready) @(negedge clk);
      @(posedge clk); #1 issue_valid = 0;
    end
    @(negedge clk);
    while (active != 0) @(negedge clk);
    check("every stream completed", n_done, 40);
    checks++; if (n_groups == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
