// tb_shared_spad_ctrl: tests the shared scratchpad and its command queue.
// The testbench models the eight private scratchpads (128 lines, one-cycle read)
// behind the shared bus, and keeps reference copies of all memories. It issues
// random batches of Shared_Ld and Shared_St commands with random lane masks, line
// counts, row strides and per-lane address offsets, then waits until the unit is
// idle and compares every private and shared line with the reference. It also
// checks that a lane's rd_busy / wr_busy flags are set while a command for that
// lane is queued or running.
module tb_shared_spad_ctrl;
  import revel_pkg::*;
  import revel_tb_pkg::*;
  localparam int SLINES = 2048, LLINES = 128;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, busy;
  cmd_t cmd = '0;
  logic [NLANES-1:0] sh_we, sh_re, rd_busy, wr_busy;
  logic [$clog2(LLINES)-1:0] sh_waddr, sh_raddr;
  line_t sh_wdata;
  line_t [NLANES-1:0] sh_rdata;
  shared_spad_ctrl dut (.*);

  int checks = 0, failures = 0, n_busy = 0;
  line_t lmem [NLANES][LLINES];
  line_t lref [NLANES][LLINES];
  line_t sref [SLINES];
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
  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NLANES; l++) begin
      if (sh_re[l]) sh_rdata[l] <= lmem[l][sh_raddr];
      if (sh_we[l]) lmem[l][sh_waddr] <= sh_wdata;
    end
    if (rst_n && busy && (rd_busy != 0 || wr_busy != 0)) n_busy++;
  end
  task automatic send(cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1 cmd_valid = 0;
  endtask
  initial begin
    sh_rdata = '0;
    for (int l = 0; l < NLANES; l++) for (int a = 0; a < LLINES; a++) begin
      for (int k = 0; k < 8; k++) lmem[l][a][k] = {$urandom, $urandom};
      lref[l][a] = lmem[l][a];
    end
    for (int a = 0; a < SLINES; a++) begin
      for (int k = 0; k < 8; k++) dut.u_mem.mem[a][k] = {$urandom, $urandom};
      sref[a] = dut.u_mem.mem[a];
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int batch = 0; batch < 12; batch++) begin
      for (int n = 0; n < 6; n++) begin
        cmd_t c;
        c = mk_cmd($urandom_range(0, 1) ? CMD_SHARED_LD : CMD_SHARED_ST, 8'($urandom), 8 * $urandom_range(0, 100),
                   $urandom_range(1, 4), $urandom_range(1, 3), 8 * $urandom_range(1, 2), 8 * $urandom_range(4, 20));
        c.saddr = ADDR_W'(8 * $urandom_range(0, 600));
        c.lane_stride = ADDR_W'(8 * $urandom_range(0, 160));
        // reference: lane by lane, line by line, in command order
        for (int l = 0; l < NLANES; l++) if (c.lanes[l]) begin
          int lp;
          lp = int'(c.addr) / 8;
          for (int j = 0; j < int'(c.n_j); j++)
            for (int i = 0; i < int'(c.n_i); i++) begin
              int sa;
              sa = (int'(c.saddr) + j * int'($signed(c.c_j)) + i * int'($signed(c.c_i)) + l * int'($signed(c.lane_stride))) / 8;
              if (c.op == CMD_SHARED_LD) lref[l][lp] = sref[sa];
              else                       sref[sa] = lref[l][lp];
              lp++;
            end
        end
        send(c);
        #1;
        check("busy flags for a queued command", (c.op == CMD_SHARED_ST ? rd_busy : wr_busy) & c.lanes, c.lanes);
      end
      @(negedge clk);
      while (busy) @(negedge clk);
      for (int l = 0; l < NLANES; l++)
        for (int a = 0; a < LLINES; a++) check($sformatf("lane %0d line %0d", l, a), lmem[l][a] == lref[l][a], 1);
      for (int a = 0; a < SLINES; a++) check($sformatf("shared line %0d", a), dut.u_mem.mem[a] == sref[a], 1);
    end
    checks++; if (n_busy == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
