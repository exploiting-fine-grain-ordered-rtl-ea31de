// tb_lane: one vector lane (command queue, stream control, scratchpad, ports,
// fabric, XFER unit) running the REVEL test program on its own.
//
// The scratchpad is preloaded with the fabric configuration image (word 0) and the
// data (a at 256 as 8 inductive rows, b at 384, s at 400). The XFER bus output is
// looped back to the lane's own XFER input, so the sqrt results travel
// out port 5 -> XFER -> in port 4 -> fabric pass-through -> out port 4 -> scratchpad.
// Checks the scratchpad contents against a reference model and counts fires of each
// dataflow, masked partial vectors, reuse, temporal-tile issue and barrier stalls.
// Afterwards it checks that a Const stream (val1/val2 pattern with a stretch of -1)
// reaches the fabric with the expected vector split.
module tb_lane;
  import revel_pkg::*;
  import revel_tb_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy, xin_ready;
  cmd_t cmd;
  xfer_t xout, xin;
  logic [NDF-1:0] s_fire;
  logic s_masked, s_reuse, s_temp, s_bar, s_drop;
  line_t sh_rdata;

  always_comb begin
    xin = xout;
    xin.v = xout.v && xout.lane == 3'd0;
  end

  lane #(.LANE(0)) dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready,
    .xout, .xout_gnt(xin.v && xin_ready), .xin, .xin_ready,
    .sh_we(1'b0), .sh_waddr('0), .sh_wdata('0), .sh_re(1'b0), .sh_raddr('0), .sh_rdata,
    .shared_rd_busy(1'b0), .shared_wr_busy(1'b0),
    .busy, .stat_fire(s_fire), .stat_masked(s_masked), .stat_reuse(s_reuse),
    .stat_temporal(s_temp), .stat_barrier(s_bar), .stat_dropped(s_drop)
  );

  int checks = 0, failures = 0;
  int n_masked = 0, n_reuse = 0, n_temp = 0, n_multi = 0, n_bar = 0, n_drop = 0;
  int n_fire [NDF];

  always @(posedge clk) if (rst_n) begin
    n_masked += s_masked; n_reuse += s_reuse; n_temp += s_temp;
    n_bar += s_bar; n_drop += s_drop;
    if ($countones(s_fire) > 1) n_multi++;
    for (int d = 0; d < NDF; d++) n_fire[d] += s_fire[d];
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(cmd_t c);
    // drive between clock edges and sample the handshake at the falling edge
    @(negedge clk);
    cmd = c; cmd_valid = 1'b1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk);
    #1 cmd_valid = 1'b0;
  endtask

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  function automatic word_t rd(int w); return dut.u_spad.mem[w / 8][w % 8]; endfunction

  word_t img [NCFG];
  word_t av [8][8];
  word_t bv [4];
  word_t sv [8];

  initial begin
    cmd_valid = 0; cmd = '0;
    for (int d = 0; d < NDF; d++) n_fire[d] = 0;
    build_cfg(img);
    for (int w = 0; w < 128 * 8; w++) dut.u_spad.mem[w / 8][w % 8] = '0;
    for (int w = 0; w < NCFG; w++) dut.u_spad.mem[w / 8][w % 8] = img[w];
    for (int j = 0; j < 8; j++)
      for (int i = 0; i < 8 - j; i++) begin
        av[j][i] = {$urandom, $urandom};
        dut.u_spad.mem[(256 + 9 * j + i) / 8][(256 + 9 * j + i) % 8] = av[j][i];
      end
    for (int k = 0; k < 4; k++) begin bv[k] = {$urandom, $urandom}; dut.u_spad.mem[48][k] = bv[k]; end
    for (int k = 0; k < 8; k++) begin sv[k] = {$urandom, $urandom}; dut.u_spad.mem[50][k] = sv[k]; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    send(mk_cmd(CMD_CONFIG, 8'hFF, 0, NCFG, 1));
    send(mk_cmd(CMD_BARRIER_LD, 8'hFF, 0, 0, 0));
    send(mk_cmd(CMD_LOCAL_LD, 8'hFF, 384, 4, 1, 1, 0, 0, 3, 12, 0));
    send(mk_cmd(CMD_LOCAL_LD, 8'hFF, 256, 8, 8, 1, 9, -256, 2));
    send(mk_cmd(CMD_LOCAL_ST, 8'hFF, 512, 8, 8, 1, 9, -256, 2));
    send(mk_cmd(CMD_LOCAL_LD, 8'hFF, 400, 8, 1, 1, 0, 0, 5));
    begin cmd_t c; c = mk_cmd(CMD_XFER, 8'hFF, 0, 1, 8, 0, 0, 0, 5); c.port2 = 4; c.dlane = 0; send(c); end
    send(mk_cmd(CMD_LOCAL_ST, 8'hFF, 640, 8, 1, 1, 0, 0, 4));
    wait_idle();

    for (int j = 0; j < 8; j++)
      for (int i = 0; i < 8 - j; i++)
        check($sformatf("y[%0d][%0d]", j, i), rd(512 + 9 * j + i), av[j][i] + bv[i % 4]);
    for (int k = 0; k < 8; k++) check($sformatf("z[%0d]", k), rd(640 + k), ref_sqrt(sv[k]));

    // Const stream: rows of (4 - j) words, (3 - j) copies of val1 then val2, on the
    // 2-word input port 4. df2 passes word 0 of each vector to output port 4, so
    // the stored words are word 0 of the vectors (7,7)(7,9) (7,7)(9) (7,9).
    begin
      cmd_t c;
      word_t exp_c [5];
      exp_c = '{64'd7, 64'd7, 64'd7, 64'd9, 64'd7};
      c = mk_cmd(CMD_CONST, 8'hFF, 0, 4, 3, 0, 0, -256, 4);
      c.val1 = 64'd7; c.val2 = 64'd9;
      send(c);
      send(mk_cmd(CMD_LOCAL_ST, 8'hFF, 768, 5, 1, 1, 0, 0, 4));
      wait_idle();
      for (int w = 0; w < 5; w++) check($sformatf("const[%0d]", w), rd(768 + w), exp_c[w]);
    end

    check("df0 fires", n_fire[0], 12);
    check("df1 fires", n_fire[1], 8);
    check("df2 fires", n_fire[2], 8 + 5);
    check("dropped", n_drop, 0);
    checks++; if (n_masked == 0) begin failures++; $display("FAIL: no masked vector"); end
    checks++; if (n_reuse == 0)  begin failures++; $display("FAIL: no reuse"); end
    checks++; if (n_temp == 0)   begin failures++; $display("FAIL: no temporal issue"); end
    checks++; if (n_multi == 0)  begin failures++; $display("FAIL: no multi-fire"); end
    checks++; if (n_bar == 0)    begin failures++; $display("FAIL: no barrier stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
