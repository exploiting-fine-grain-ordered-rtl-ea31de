// tb_cmd_queue: tests the per-lane command queue (issue rules and barriers).
// Random programs of Local_Ld, Const, Local_St, XFER, Configure and barriers are
// pushed; behavioural stream-control and XFER units accept commands at random and
// complete them after random delays. Each command carries a sequence number in its
// address field. Checks:
//  - every non-barrier command is issued exactly once;
//  - two commands on the same input or output port are never active together, and
//    they issue in program order;
//  - no command younger than a Barrier_Ld issues before every older load/configure
//    completed (Barrier_St: every older store), and the barrier counts as a stall
//    while it waits;
//  - commands on different ports do pass each other (out-of-order issue happens).
module tb_cmd_queue;
  import revel_pkg::*;
  import revel_tb_pkg::*;
  localparam int LANE = 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, sc_valid, sc_ready, sc_done, xu_valid, xu_ready, xu_done, busy, barrier_stall;
  cmd_t in_cmd = '0, sc_cmd, xu_cmd;
  cmd_op_e sc_done_op;
  logic [2:0] sc_done_port, xu_done_port, xu_done_lane, xu_done_dport;
  cmd_queue #(.LANE(LANE)) dut (.*, .shared_rd_busy(1'b0), .shared_wr_busy(1'b0));

  int checks = 0, failures = 0, n_ooo = 0, n_stall = 0, n_issued = 0, n_sent = 0;
  cmd_t prog [$];
  bit   issued [int];
  bit   completed [int];
  int   last_ip [NIPORT], last_op [NOPORT], max_issued;
  bit   ip_act [NIPORT], op_act [NOPORT];
  // behavioural units: a list of active commands with completion countdowns
  cmd_t act_c [$];
  int   act_t [$];

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
  function automatic bit ip_of(cmd_t c, output int p);
    p = c.port;
    if (c.op == CMD_LOCAL_LD || c.op == CMD_CONST) return 1;
    if (c.op == CMD_XFER && c.dlane == 3'(LANE)) begin p = c.port2; return 1; end
    return 0;
  endfunction
  function automatic bit is_ld(cmd_t c); return c.op == CMD_LOCAL_LD || c.op == CMD_CONFIG; endfunction

  // Inputs change only at the falling edge, so the queue sees stable values at the
  // rising edge. Completions: at most one per unit per cycle.
  int sd_i, xd_i;
  always @(negedge clk) begin
    sc_ready = $urandom_range(0, 2) != 0;
    xu_ready = $urandom_range(0, 2) != 0;
    sc_done = 0; sc_done_op = CMD_LOCAL_LD; sc_done_port = '0;
    xu_done = 0; xu_done_port = '0; xu_done_lane = '0; xu_done_dport = '0;
    sd_i = -1; xd_i = -1;
    foreach (act_c[i]) if (act_t[i] == 0) begin
      if (act_c[i].op == CMD_XFER && !xu_done) begin
        xu_done = 1; xd_i = i;
        xu_done_port = act_c[i].port; xu_done_lane = act_c[i].dlane; xu_done_dport = act_c[i].port2;
      end else if (act_c[i].op != CMD_XFER && !sc_done) begin
        sc_done = 1; sd_i = i;
        sc_done_op = act_c[i].op; sc_done_port = act_c[i].port;
      end
    end
  end
  task automatic retire(int i);
    int p;
    completed[int'(act_c[i].addr)] = 1;
    if (ip_of(act_c[i], p)) ip_act[p] = 0;
    if (act_c[i].op == CMD_LOCAL_ST || act_c[i].op == CMD_XFER) op_act[act_c[i].port] = 0;
  endtask
  always @(posedge clk) if (rst_n) begin
    n_stall += barrier_stall;
    // retire the completions signalled this cycle
    if (sd_i >= 0) retire(sd_i);
    if (xd_i >= 0) retire(xd_i);
    if (sd_i > xd_i) begin
      if (sd_i >= 0) begin act_c.delete(sd_i); act_t.delete(sd_i); end
      if (xd_i >= 0) begin act_c.delete(xd_i); act_t.delete(xd_i); end
    end else begin
      if (xd_i >= 0) begin act_c.delete(xd_i); act_t.delete(xd_i); end
      if (sd_i >= 0) begin act_c.delete(sd_i); act_t.delete(sd_i); end
    end
    sd_i = -1; xd_i = -1;
    foreach (act_t[i]) if (act_t[i] > 0) act_t[i]--;
    // issue
    for (int u = 0; u < 2; u++) begin
      cmd_t c;
      bit v;
      v = (u == 0) ? (sc_valid && sc_ready) : (xu_valid && xu_ready);
      c = (u == 0) ? sc_cmd : xu_cmd;
      if (v) begin
        int id, p;
        id = int'(c.addr);
        n_issued++;
        check("issued once", issued.exists(id), 0);
        issued[id] = 1;
        if (id < max_issued) n_ooo++;
        if (id > max_issued) max_issued = id;
        if (ip_of(c, p)) begin
          check("input port free", ip_act[p], 0); ip_act[p] = 1;
          check("input port order", id > last_ip[p], 1); last_ip[p] = id;
        end
        if (c.op == CMD_LOCAL_ST || c.op == CMD_XFER) begin
          check("output port free", op_act[c.port], 0); op_act[c.port] = 1;
          check("output port order", id > last_op[c.port], 1); last_op[c.port] = id;
        end
        // barriers
        for (int b = 0; b < id; b++)
          if (prog[b].op == CMD_BARRIER_LD || prog[b].op == CMD_BARRIER_ST)
            for (int k = 0; k < b; k++)
              if ((prog[b].op == CMD_BARRIER_LD && is_ld(prog[k])) ||
                  (prog[b].op == CMD_BARRIER_ST && prog[k].op == CMD_LOCAL_ST))
                check("barrier respected", completed.exists(k), 1);
        act_c.push_back(c); act_t.push_back($urandom_range(0, 30));
      end
    end
  end
  initial begin
    cmd_op_e ops [7] = '{CMD_LOCAL_LD, CMD_CONST, CMD_LOCAL_ST, CMD_XFER, CMD_CONFIG, CMD_BARRIER_LD, CMD_BARRIER_ST};
    int nbar;
    for (int p = 0; p < NIPORT; p++) begin last_ip[p] = -1; ip_act[p] = 0; end
    for (int p = 0; p < NOPORT; p++) begin last_op[p] = -1; op_act[p] = 0; end
    max_issued = -1;
    sc_ready = 0; xu_ready = 0; sd_i = -1; xd_i = -1;
    sc_done = 0; xu_done = 0; sc_done_op = CMD_LOCAL_LD; sc_done_port = '0;
    xu_done_port = '0; xu_done_lane = '0; xu_done_dport = '0;
    nbar = 0;
    for (int i = 0; i < 400; i++) begin
      cmd_t c;
      c = '0;
      c.op = ops[$urandom_range(0, 9) < 7 ? $urandom_range(0, 4) : $urandom_range(5, 6)];
      c.addr = ADDR_W'(i);
      c.port = 3'($urandom_range(0, 5));
      c.port2 = 3'($urandom_range(0, 5));
      c.dlane = $urandom_range(0, 1) ? 3'(LANE) : 3'($urandom);
      if (c.op == CMD_BARRIER_LD || c.op == CMD_BARRIER_ST) nbar++;
      prog.push_back(c);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (prog[i]) begin
      @(negedge clk); #2;
      in_cmd = prog[i]; in_valid = 1;
      while (!in_ready) begin @(negedge clk); #2; end
      @(posedge clk); #1 in_valid = 0;
      n_sent++;
    end
    @(negedge clk);
    while (busy || act_c.size() != 0) @(negedge clk);
    check("all non-barrier commands issued", n_issued, n_sent - nbar);
    checks++; if (n_ooo == 0) begin failures++; $display("FAIL: never out of order"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL: no barrier stall"); end
    $display("issued=%0d out_of_order=%0d stall_cycles=%0d", n_issued, n_ooo, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
