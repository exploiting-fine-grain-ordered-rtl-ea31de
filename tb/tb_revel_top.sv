// tb_revel_top: end-to-end test of REVEL with all eight lanes at default sizes.
//
// The testbench plays the control core. It preloads the shared scratchpad with a
// fabric configuration image and per-lane data, then issues one vector-stream
// program to all lanes at once:
//   Shared_Ld config and data -> Barrier_St -> Configure -> Barrier_Ld ->
//   Local_Ld b (one vector, reused 12 times) -> Local_Ld a (inductive rows of
//   8,7,..,1 words, stretch -1) -> Local_St y (same inductive pattern) ->
//   Local_Ld s -> XFER sqrt(s) to the next lane -> Local_St z
// then waits for the lanes (Wait) and copies the results back with Shared_St.
// Checks: y[j][i] = a[j][i] + b[i mod 4] for every element of the triangle, and
// z = sqrt(s of the previous lane), read from the shared scratchpad. It also counts
// how often each mechanism happened (inductive partial vectors, port reuse,
// temporal-tile issue, several dataflows firing in one cycle, barrier stalls,
// remote XFER) and fails a mechanism that never happened.
module tb_revel_top;
  import revel_pkg::*;
  import revel_tb_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, shared_busy;
  cmd_t cmd;
  logic [NLANES-1:0] lane_busy, s_masked, s_reuse, s_temp, s_bar, s_drop, s_xr;
  logic [NLANES-1:0][NDF-1:0] s_fire;

  revel_top dut (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready, .lane_busy, .shared_busy,
    .stat_fire(s_fire), .stat_masked(s_masked), .stat_reuse(s_reuse), .stat_temporal(s_temp),
    .stat_barrier(s_bar), .stat_dropped(s_drop), .stat_xfer_remote(s_xr)
  );

  int checks = 0, failures = 0;
  int n_masked = 0, n_reuse = 0, n_temp = 0, n_multi = 0, n_bar = 0, n_xr = 0, n_drop = 0;
  int n_fire [NDF];
  longint cycles = 0;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    for (int l = 0; l < NLANES; l++) begin
      n_masked += s_masked[l]; n_reuse += s_reuse[l]; n_temp += s_temp[l];
      n_bar += s_bar[l]; n_xr += s_xr[l]; n_drop += s_drop[l];
      if ($countones(s_fire[l]) > 1) n_multi++;
      for (int d = 0; d < NDF; d++) n_fire[d] += s_fire[l][d];
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
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

  // data: a[j][i] at lane word 256 + 9j + i, b at 384, s at 400
  function automatic word_t aval(int l, int j, int i); return word_t'(1000 * l + 10 * j + i + 1); endfunction
  function automatic word_t bval(int l, int k);        return word_t'(100000 * (l + 1) + k); endfunction
  function automatic word_t sval(int l, int k);        return word_t'((l + 3 * k + 2) * (l + 3 * k + 2) + k); endfunction

  word_t img [NCFG];
  localparam int CFG_LINES = (NCFG + 7) / 8;

  initial begin
    cmd_valid = 0; cmd = '0;
    for (int d = 0; d < NDF; d++) n_fire[d] = 0;
    build_cfg(img);
    // preload the shared scratchpad: config image at line 0, lane data at word 2048 + 256 l
    for (int w = 0; w < CFG_LINES * 8; w++)
      dut.u_shared.u_mem.mem[w / 8][w % 8] = (w < NCFG) ? img[w] : '0;
    for (int l = 0; l < NLANES; l++) begin
      for (int w = 0; w < 256; w++) dut.u_shared.u_mem.mem[(2048 + 256 * l + w) / 8][w % 8] = '0;
      for (int j = 0; j < 8; j++)
        for (int i = 0; i < 8 - j; i++)
          dut.u_shared.u_mem.mem[(2048 + 256 * l + 9 * j + i) / 8][(9 * j + i) % 8] = aval(l, j, i);
      for (int k = 0; k < 4; k++) dut.u_shared.u_mem.mem[(2048 + 256 * l + 128) / 8][k] = bval(l, k);
      for (int k = 0; k < 8; k++) dut.u_shared.u_mem.mem[(2048 + 256 * l + 144) / 8][k] = sval(l, k);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // Shared_Ld configuration (same image for all lanes) and per-lane data
    begin cmd_t c; c = mk_cmd(CMD_SHARED_LD, 8'hFF, 0, CFG_LINES, 1, 8); c.saddr = 0; send(c); end
    begin cmd_t c; c = mk_cmd(CMD_SHARED_LD, 8'hFF, 256, 32, 1, 8); c.saddr = 2048; c.lane_stride = 256; send(c); end
    send(mk_cmd(CMD_BARRIER_ST, 8'hFF, 0, 0, 0));
    send(mk_cmd(CMD_CONFIG, 8'hFF, 0, NCFG, 1));
    send(mk_cmd(CMD_BARRIER_LD, 8'hFF, 0, 0, 0));
    send(mk_cmd(CMD_LOCAL_LD, 8'hFF, 384, 4, 1, 1, 0, 0, 3, 12, 0));           // b, reused 12 times
    send(mk_cmd(CMD_LOCAL_LD, 8'hFF, 256, 8, 8, 1, 9, -256, 2));              // a, inductive rows
    send(mk_cmd(CMD_LOCAL_ST, 8'hFF, 512, 8, 8, 1, 9, -256, 2));              // y, inductive rows
    send(mk_cmd(CMD_LOCAL_LD, 8'hFF, 400, 8, 1, 1, 0, 0, 5));                 // s
    begin cmd_t c; c = mk_cmd(CMD_XFER, 8'hFF, 0, 1, 8, 0, 0, 0, 5); c.port2 = 4; c.dlane = 1; send(c); end
    send(mk_cmd(CMD_LOCAL_ST, 8'hFF, 640, 8, 1, 1, 0, 0, 4));                 // z
    // Wait: until every lane is idle
    @(posedge clk);
    while (lane_busy != 0 || shared_busy) @(posedge clk);
    begin cmd_t c; c = mk_cmd(CMD_SHARED_ST, 8'hFF, 512, 32, 1, 8); c.saddr = 4096; c.lane_stride = 256; send(c); end
    @(posedge clk);
    while (shared_busy) @(posedge clk);
    repeat (2) @(posedge clk);

    for (int l = 0; l < NLANES; l++) begin
      for (int j = 0; j < 8; j++)
        for (int i = 0; i < 8 - j; i++) begin
          int w;
          w = 4096 + 256 * l + 9 * j + i;
          check($sformatf("y lane %0d [%0d][%0d]", l, j, i), dut.u_shared.u_mem.mem[w / 8][w % 8],
                aval(l, j, i) + bval(l, i % 4));
        end
      for (int k = 0; k < 8; k++) begin
        int w, src;
        w = 4096 + 256 * l + 128 + k;
        src = (l + NLANES - 1) % NLANES;
        check($sformatf("z lane %0d [%0d]", l, k), dut.u_shared.u_mem.mem[w / 8][w % 8],
              ref_sqrt(sval(src, k)));
      end
    end
    // mechanisms
    check("df0 fired 12 vectors per lane", n_fire[0], 12 * NLANES);
    check("df1 fired 8 per lane", n_fire[1], 8 * NLANES);
    check("df2 fired 8 per lane", n_fire[2], 8 * NLANES);
    check("no dropped sqrt/div operations", n_drop, 0);
    checks++; if (n_masked == 0) begin failures++; $display("FAIL: no masked partial vector"); end
    checks++; if (n_reuse == 0)  begin failures++; $display("FAIL: no port reuse"); end
    checks++; if (n_temp == 0)   begin failures++; $display("FAIL: temporal tile never issued"); end
    checks++; if (n_multi == 0)  begin failures++; $display("FAIL: never several dataflows in one cycle"); end
    checks++; if (n_bar == 0)    begin failures++; $display("FAIL: no barrier stall"); end
    checks++; if (n_xr == 0)     begin failures++; $display("FAIL: no remote XFER"); end
    $display("cycles=%0d masked=%0d reuse=%0d temporal=%0d multi_fire=%0d barrier_stall=%0d remote_xfer=%0d",
             cycles, n_masked, n_reuse, n_temp, n_multi, n_bar, n_xr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
