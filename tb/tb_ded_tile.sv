// tb_ded_tile: tests dedicated tiles (adder and multiplier kinds).
// Corner-switch links carry random values with random valid bits. For a series of
// random configurations (opcode, operand selects over the four corners, the
// constant and the accumulator) the tile output must match a reference model one
// cycle later: it fires only when all operands it uses are valid. The adder tile
// also runs the accumulate operation, which adds operand A every time it fires and
// emits and clears the sum when operand B bit 0 is set. The model keeps the
// accumulator across configurations, so later operations that read it are checked too.
module tb_ded_tile;
  import revel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  word_t cfg [2];
  link_t [3:0] corner;
  link_t out [2];
  logic dr [2];
  ded_tile #(.KIND(FU_ADD)) u_add (.clk, .rst_n, .cfg(cfg[0]), .corner, .out(out[0]), .dropped(dr[0]));
  ded_tile #(.KIND(FU_MUL)) u_mul (.clk, .rst_n, .cfg(cfg[1]), .corner, .out(out[1]), .dropped(dr[1]));

  int checks = 0, failures = 0, n_fire = 0, n_acc = 0;
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

  function automatic link_t pick(int s, link_t [3:0] c, word_t acc, word_t k);
    if (s < 4) return c[s];
    if (s == 4) return '{v: 1'b1, d: acc};
    return '{v: 1'b1, d: k};
  endfunction

  initial begin
    fu_op_e add_ops [4] = '{OP_ADD, OP_SUB, OP_PASS, OP_ACC};
    fu_op_e mul_ops [2] = '{OP_MUL, OP_PASS};
    word_t acc [2];
    link_t expo [2];
    corner = '0; cfg[0] = '0; cfg[1] = '0;
    acc = '{0, 0}; expo[0] = '0; expo[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 40; phase++) begin
      corner = '0;
      @(negedge clk);
      // new configuration: sel A from corners, sel B from corners or constant
      for (int u = 0; u < 2; u++) begin
        fu_op_e o;
        o = (u == 0) ? add_ops[$urandom_range(0, 3)] : mul_ops[$urandom_range(0, 1)];
        cfg[u] = {$urandom, 22'd0, 3'($urandom_range(0, 5)), 3'($urandom_range(0, 3)), 4'(o)};
      end
      for (int it = 0; it < 100; it++) begin
        for (int c = 0; c < 4; c++) begin
          corner[c].v = $urandom_range(0, 2) != 0;
          corner[c].d = {$urandom, $urandom};
          if ($urandom_range(0, 4) != 0) corner[c].d[0] = 1'b0;
        end
        for (int u = 0; u < 2; u++) begin
          fu_op_e o;
          link_t a, b;
          o = fu_op_e'(cfg[u][3:0]);
          a = pick(cfg[u][6:4], corner, acc[u], {{32{cfg[u][63]}}, cfg[u][63:32]});
          b = pick(cfg[u][9:7], corner, acc[u], {{32{cfg[u][63]}}, cfg[u][63:32]});
          expo[u] = '0;
          if (a.v && (o == OP_PASS || b.v)) begin
            n_fire++;
            case (o)
              OP_ADD:  expo[u] = '{1'b1, a.d + b.d};
              OP_SUB:  expo[u] = '{1'b1, a.d - b.d};
              OP_MUL:  expo[u] = '{1'b1, a.d * b.d};
              OP_PASS: expo[u] = '{1'b1, a.d};
              default: begin  // OP_ACC
                if (b.d[0]) begin expo[u] = '{1'b1, acc[u] + a.d}; acc[u] = '0; n_acc++; end
                else acc[u] = acc[u] + a.d;
              end
            endcase
          end
        end
        @(negedge clk);
        for (int u = 0; u < 2; u++) begin
          check("out valid", out[u].v, expo[u].v);
          if (expo[u].v) check($sformatf("out data u%0d cfg %0h", u, cfg[u][9:0]), out[u].d, expo[u].d);
        end
      end
    end
    checks++; if (n_fire == 0 || n_acc == 0) begin failures++; $display("FAIL: mechanism not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
