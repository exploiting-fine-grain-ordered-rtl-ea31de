// tb_df_firing: random test of the dataflow firing logic.
// For a series of random port-to-dataflow maps and latencies (1..40 cycles), random
// input-vector readiness and output-port free space are applied every cycle. A
// reference model tracks the in-flight instances of each dataflow (fired within the
// last latency+1 cycles) and predicts `fire` and `consume` exactly. It also checks
// that different dataflows fire in the same cycle.
module tb_df_firing;
  import revel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  word_t cfg_fire = '0, cfg_lat = '0;
  logic [NIPORT-1:0] ip_valid = '0;
  logic [NOPORT-1:0][6:0] op_free = '0;
  logic [NDF-1:0] fire;
  logic [NIPORT-1:0] consume;
  df_firing dut (.*);

  int checks = 0, failures = 0, n_multi = 0, n_fire = 0;
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
  initial begin
    int hist [NDF][$];   // cycles in which each dataflow fired
    int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    for (int phase = 0; phase < 20; phase++) begin
      // drain in-flight instances before changing the map
      @(negedge clk);
      ip_valid = '0;
      repeat (70) begin @(negedge clk); cyc++; end
      for (int d = 0; d < NDF; d++) hist[d].delete();
      for (int p = 0; p < NIPORT; p++) cfg_fire[3*p +: 3] = {1'($urandom_range(0, 3) != 0), 2'($urandom)};
      for (int p = 0; p < NOPORT; p++) cfg_fire[18 + 3*p +: 3] = {1'($urandom_range(0, 2) != 0), 2'($urandom)};
      for (int d = 0; d < NDF; d++) cfg_lat[8*d +: 8] = 8'($urandom_range(1, 40));
      for (int it = 0; it < 1000; it++) begin
        logic [NDF-1:0] ef;
        @(negedge clk); cyc++;
        ip_valid = $urandom_range(0, 7) != 0 ? '1 : 6'($urandom);
        for (int p = 0; p < NOPORT; p++) op_free[p] = 7'($urandom_range(0, 4 * port_words(p)));
        for (int d = 0; d < NDF; d++) begin
          bit has_in, ok;
          int infl, lat;
          lat = cfg_lat[8*d +: 6];
          infl = 0;
          foreach (hist[d][i]) if (hist[d][i] >= cyc - 1 - lat && hist[d][i] <= cyc - 1) infl++;
          has_in = 0; ok = 1;
          for (int p = 0; p < NIPORT; p++)
            if (cfg_fire[3*p+2] && cfg_fire[3*p +: 2] == 2'(d)) begin has_in = 1; if (!ip_valid[p]) ok = 0; end
          for (int p = 0; p < NOPORT; p++)
            if (cfg_fire[18+3*p+2] && cfg_fire[18+3*p +: 2] == 2'(d))
              if (op_free[p] < (infl + 1) * port_words(p)) ok = 0;
          ef[d] = has_in && ok;
          if (ef[d]) hist[d].push_back(cyc);
        end
        #1;
        check("fire", fire, ef);
        for (int p = 0; p < NIPORT; p++) check("consume", consume[p], cfg_fire[3*p+2] && ef[cfg_fire[3*p +: 2]]);
        if ($countones(ef) > 1) n_multi++;
        n_fire += $countones(ef);
      end
    end
    checks++; if (n_multi == 0 || n_fire == 0) begin failures++; $display("FAIL: no (multi-)fire"); end
    $display("fires=%0d multi=%0d", n_fire, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
