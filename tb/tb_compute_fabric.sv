// tb_compute_fabric: tests the 5x5 compute fabric with the three-dataflow test
// configuration (vector add on four dedicated adders, square root on a temporal
// tile, pass-through on a dedicated adder).
// The configuration image is written through the configuration port in groups of
// 8 words, as the Configure stream does. Input vectors are then offered at random
// times on ports 2/3 (df0, sometimes with a partial mask), 5 (df1) and 4 (df2);
// output ports have random free space. Each output port's result vectors are
// compared, in order, against a model of the dataflows, including that masked-off
// input words produce masked-off outputs. It also counts fires of several
// dataflows in the same cycle and temporal-tile issues.
module tb_compute_fabric;
  import revel_pkg::*;
  import revel_tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic cfg_valid = 0;
  logic [CNT_W-1:0] cfg_addr = '0;
  wgroup_t cfg_group = '0;
  logic [NIPORT-1:0] ip_valid = '0, ip_consume;
  word_t [NIWORDS-1:0] ip_data = '0;
  logic [NIWORDS-1:0] ip_mask = '0;
  logic [NOPORT-1:0][6:0] op_free = '0;
  logic [NOPORT-1:0] op_valid;
  line_t [NOPORT-1:0] op_data;
  logic [NOPORT-1:0][LINE_W-1:0] op_mask;
  logic [NDF-1:0] fire;
  logic temporal_issue, dropped;
  compute_fabric dut (.*);

  int checks = 0, failures = 0, n_multi = 0, n_temp = 0, n_part = 0;
  int n_out [NOPORT];
  typedef struct { line_t d; logic [LINE_W-1:0] m; } vec_t;
  vec_t expq [NOPORT][$];
  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // output monitor
  always @(posedge clk) if (rst_n) begin
    n_temp += temporal_issue;
    if ($countones(fire) > 1) n_multi++;
    check("no dropped operation", dropped, 0);
    for (int p = 0; p < NOPORT; p++) if (op_valid[p]) begin
      n_out[p]++;
      if (expq[p].size() == 0) check($sformatf("unexpected output on port %0d", p), 1, 0);
      else begin
        vec_t e;
        e = expq[p].pop_front();
        check($sformatf("port %0d mask", p), op_mask[p], e.m);
        for (int w = 0; w < LINE_W; w++) if (e.m[w]) check($sformatf("port %0d word %0d", p, w), op_data[p][w], e.d[w]);
      end
    end
  end
  initial begin
    word_t img [NCFG];
    for (int p = 0; p < NOPORT; p++) n_out[p] = 0;
    build_cfg(img);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NCFG; b += 8) begin
      @(negedge clk);
      cfg_valid = 1; cfg_addr = CNT_W'(b);
      cfg_group.n = 4'((NCFG - b) < 8 ? NCFG - b : 8);
      for (int k = 0; k < 8; k++) cfg_group.data[k] = (b + k < NCFG) ? img[b + k] : '0;
    end
    @(negedge clk); cfg_valid = 0;
    for (int it = 0; it < 2000; it++) begin
      // new vectors where the previous one was consumed
      for (int p = 2; p < NIPORT; p++)
        if (!ip_valid[p] && $urandom_range(0, 1)) begin
          ip_valid[p] = 1;
          for (int w = 0; w < port_words(p); w++) begin
            ip_data[iword_base(p) + w] = {$urandom, $urandom};
            ip_mask[iword_base(p) + w] = 1'b1;
          end
        end
      // df0 partial vectors: the same mask on both operand ports
      if (ip_valid[2] && ip_valid[3] && $urandom_range(0, 3) == 0) begin
        logic [3:0] m;
        m = 4'($urandom_range(1, 15));
        for (int w = 0; w < 4; w++) begin ip_mask[16 + w] = m[w]; ip_mask[20 + w] = m[w]; end
      end
      for (int p = 0; p < NOPORT; p++) op_free[p] = 7'($urandom_range(0, 4 * port_words(p)));
      #1;
      // record expected results of the dataflows that fire now
      if (ip_consume[2]) begin
        vec_t e;
        e.d = '0; e.m = '0;
        for (int w = 0; w < 4; w++) begin
          e.m[w] = ip_mask[16 + w];
          e.d[w] = ip_data[16 + w] + ip_data[20 + w];
        end
        if (e.m != 4'hF) n_part++;
        if (e.m != 0) expq[2].push_back(e);
      end
      if (ip_consume[5]) begin
        vec_t e;
        e.d = '0; e.m = 8'h01; e.d[0] = ref_sqrt(ip_data[26]);
        expq[5].push_back(e);
      end
      if (ip_consume[4]) begin
        vec_t e;
        e.d = '0; e.m = 8'h01; e.d[0] = ip_data[24];
        expq[4].push_back(e);
      end
      @(negedge clk);
      for (int p = 2; p < NIPORT; p++) if (ip_consume[p]) ip_valid[p] = 0;
    end
    ip_valid = '0;
    repeat (40) @(negedge clk);
    for (int p = 0; p < NOPORT; p++) check($sformatf("port %0d results outstanding", p), expq[p].size(), 0);
    checks++; if (n_multi == 0 || n_temp == 0 || n_part == 0 || n_out[5] == 0) begin failures++; $display("FAIL: mechanism missing"); end
    $display("out2=%0d out4=%0d out5=%0d multi=%0d temporal=%0d partial=%0d", n_out[2], n_out[4], n_out[5], n_multi, n_temp, n_part);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
