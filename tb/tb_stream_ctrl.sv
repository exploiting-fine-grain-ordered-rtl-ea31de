// tb_stream_ctrl: tests the stream-control unit (address generation, scheduling,
// Const generation, store path) with behavioural port and scratchpad models.
// The testbench models the six input ports and six output ports as word queues of
// 4 vectors, and the scratchpad as an array with one-cycle read latency. It issues
// random streams: Local_Ld with random strides and inductive stretch (row j has
// ceil(n_i + j*s_ji) words), Const patterns, and Local_St streams fed from output
// queues that the testbench fills with random words. It checks every pushed word
// and its end-of-row tag against a reference address generator, every stored word
// against the expected address, that a port never receives more than it has room
// for, and that every stream reports completion exactly once.
module tb_stream_ctrl;
  import revel_pkg::*;
  import revel_tb_pkg::*;
  localparam int LINES = 128;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic issue_valid = 0, issue_ready;
  cmd_t issue_cmd = '0;
  logic [NIPORT-1:0][6:0] ip_free, ip_count;
  logic [NIPORT-1:0][3:0] ip_other = '0;
  logic [NOPORT-1:0][6:0] op_count, op_free;
  line_t [NOPORT-1:0] op_head;
  logic [NOPORT-1:0][3:0] op_pop;
  logic ip_push_valid, ip_cfg_valid, cfg_valid, sp_re, sp_we, done;
  logic [2:0] ip_push_port, ip_cfg_port, done_port;
  wgroup_t ip_push, cfg_group;
  logic [CNT_W-1:0] ip_cfg_nr, cfg_addr;
  logic signed [CNT_W-1:0] ip_cfg_sr;
  logic [$clog2(LINES)-1:0] sp_raddr, sp_waddr;
  line_t sp_rdata, sp_wdata;
  logic [LINE_W-1:0] sp_wmask;
  cmd_op_e done_op;
  logic [7:0] active;

  stream_ctrl dut (.*, .rd_block(1'b0), .wr_block(1'b0));

  int checks = 0, failures = 0, n_done = 0;
  line_t mem [LINES];
  word_t ipq [NIPORT][$];
  word_t opq [NOPORT][$];
  // expected pushes per input port and expected stores per output port
  word_t exp_w [NIPORT][$];
  bit    exp_e [NIPORT][$];
  int    st_addr [NOPORT][$];

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask
  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb
    for (int p = 0; p < NIPORT; p++) begin
      ip_count[p] = 7'(ipq[p].size());
      ip_free[p]  = 7'(4 * port_words(p) - ipq[p].size());
    end
  always_comb
    for (int p = 0; p < NOPORT; p++) begin
      op_count[p] = 7'(opq[p].size());
      op_free[p]  = 7'(4 * port_words(p) - opq[p].size());
      op_head[p]  = '0;
      for (int k = 0; k < LINE_W; k++) if (k < opq[p].size()) op_head[p][k] = opq[p][k];
    end

  // scratchpad model, pushes, stores
  always @(posedge clk) if (rst_n) begin
    if (sp_re) sp_rdata <= mem[sp_raddr];
    if (ip_push_valid) begin
      int p;
      p = ip_push_port;
      check("push fits", int'(ip_push.n) <= int'(ip_free[p]), 1);
      for (int k = 0; k < int'(ip_push.n); k++) begin
        if (exp_w[p].size() == 0) check("unexpected push", 1, 0);
        else begin
          check($sformatf("port %0d word", p), ip_push.data[k], exp_w[p].pop_front());
          check($sformatf("port %0d eor", p), ip_push.eor && k == int'(ip_push.n) - 1, exp_e[p].pop_front());
        end
        ipq[p].push_back(ip_push.data[k]);
      end
    end
    if (sp_we)
      for (int k = 0; k < LINE_W; k++) if (sp_wmask[k]) mem[sp_waddr][k] <= sp_wdata[k];
    if (done) n_done++;
    for (int p = 0; p < NOPORT; p++) repeat (int'(op_pop[p])) void'(opq[p].pop_front());
  end
  // stores: check the address of each stored word
  always @(posedge clk) if (rst_n && sp_we)
    for (int k = 0; k < LINE_W; k++) if (sp_wmask[k]) begin
      int a;
      bit hit;
      a = int'(sp_waddr) * 8 + k;
      hit = 0;
      for (int p = 0; p < NOPORT; p++)
        if (!hit && st_addr[p].size() != 0 && st_addr[p][0] == a) begin
          hit = 1; void'(st_addr[p].pop_front());
        end
      check("store to an expected address", hit, 1);
    end

  // the fabric side: consume input words, produce output words
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NIPORT; p++)
      if ($urandom_range(0, 2) == 0) repeat ($urandom_range(0, 8)) if (ipq[p].size() != 0) void'(ipq[p].pop_front());
  end

  word_t st_val [NOPORT][$];   // words the testbench put into output ports, to check memory later
  int    st_all [NOPORT][$];   // all store addresses, in order
  int    st_left [NOPORT];     // words still to be produced
  always @(negedge clk) if (rst_n)
    for (int p = 0; p < NOPORT; p++)
      if (st_left[p] > 0 && opq[p].size() < 4 * port_words(p) && $urandom_range(0, 1)) begin
        word_t v;
        v = {$urandom, $urandom};
        opq[p].push_back(v); st_val[p].push_back(v); st_left[p]--;
      end

  function automatic int rowlen(cmd_t c, int j);
    return int'(fx_ceil((CNT_W+FRAC+1)'($signed({1'b0, c.n_i}) * 256 + j * $signed(c.s_ji))));
  endfunction

  task automatic issue(cmd_t c);
    @(negedge clk);
    issue_cmd = c; issue_valid = 1;
    while (!issue_ready) @(negedge clk);
    @(posedge clk); #1 issue_valid = 0;
  endtask

  initial begin
    int n_streams;
    for (int l = 0; l < LINES; l++) for (int k = 0; k < 8; k++) mem[l][k] = {$urandom, $urandom};
    for (int p = 0; p < NOPORT; p++) st_left[p] = 0;
    sp_rdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    n_streams = 0;
    for (int s = 0; s < 60; s++) begin
      cmd_t c;
      int kind, p, base;
      kind = $urandom_range(0, 2);
      p = $urandom_range(0, 5);
      // one stream per port at a time (the command queue guarantees this)
      if (kind == 2) begin
        while (st_left[p] != 0 || st_addr[p].size() != 0 || opq[p].size() != 0) @(negedge clk);
      end else begin
        while (exp_w[p].size() != 0) @(negedge clk);
      end
      c = mk_cmd(kind == 0 ? CMD_LOCAL_LD : kind == 1 ? CMD_CONST : CMD_LOCAL_ST, 8'hFF, 0,
                 $urandom_range(1, 12), $urandom_range(1, 5));
      c.port = 3'(p);
      c.c_i = CNT_W'($urandom_range(0, 3) == 0 ? 2 : 1);
      c.c_j = CNT_W'($urandom_range(0, 12));
      c.s_ji = CNT_W'(-$urandom_range(0, 2) * 128);
      c.val1 = {$urandom, $urandom}; c.val2 = {$urandom, $urandom};
      base = (kind == 2) ? 512 + 80 * p : $urandom_range(0, 400);
      c.addr = ADDR_W'(base);
      // expected word sequence
      for (int j = 0; j < int'(c.n_j); j++) begin
        int len;
        len = rowlen(c, j);
        for (int i = 0; i < len; i++) begin
          int a;
          a = base + j * int'($signed(c.c_j)) + i * int'($signed(c.c_i));
          if (kind == 0) begin exp_w[p].push_back(mem[a / 8][a % 8]); exp_e[p].push_back(i == len - 1); end
          if (kind == 1) begin exp_w[p].push_back(i == len - 1 ? c.val2 : c.val1); exp_e[p].push_back(i == len - 1); end
          if (kind == 2) begin st_addr[p].push_back(a); st_all[p].push_back(a); st_left[p]++; end
        end
      end
      if (kind == 2 && st_left[p] == 0) st_all[p].delete();
      issue(c);
      n_streams++;
    end
    repeat (400) @(negedge clk);
    for (int p = 0; p < NIPORT; p++) check("loads complete", exp_w[p].size(), 0);
    for (int p = 0; p < NOPORT; p++) begin
      check("stores complete", st_addr[p].size(), 0);
      // later writes win: compare the last value stored to each address
      begin
        word_t last [int];
        foreach (st_all[p][i]) last[st_all[p][i]] = st_val[p][i];
        foreach (last[a]) check("stored value", mem[a / 8][a % 8], last[a]);
      end
    end
    check("every stream completed once", n_done, n_streams);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
