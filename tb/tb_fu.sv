// tb_fu: tests the three functional-unit kinds against a reference model.
// Adder and multiplier units get a random operation every cycle and must return it
// one cycle later (64-bit add/sub/mul, 16-bit subword add/sub, Q8.8 subword
// multiply, pass). The sqrt/div unit gets random operations; accepted ones must come
// out 12 cycles later in order, an operation offered within 5 cycles of the last
// accepted one must raise `dropped`, and none may be lost or invented.
module tb_fu;
  import revel_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic   v [3];
  fu_op_e op [3];
  word_t  a [3], b [3], y [3];
  logic   ov [3], dr [3];
  fu #(.KIND(FU_ADD))  u_add (.clk, .rst_n, .in_valid(v[0]), .op(op[0]), .a(a[0]), .b(b[0]), .out_valid(ov[0]), .y(y[0]), .dropped(dr[0]));
  fu #(.KIND(FU_MUL))  u_mul (.clk, .rst_n, .in_valid(v[1]), .op(op[1]), .a(a[1]), .b(b[1]), .out_valid(ov[1]), .y(y[1]), .dropped(dr[1]));
  fu #(.KIND(FU_SQRT)) u_sq  (.clk, .rst_n, .in_valid(v[2]), .op(op[2]), .a(a[2]), .b(b[2]), .out_valid(ov[2]), .y(y[2]), .dropped(dr[2]));

  int checks = 0, failures = 0, n_drop = 0, n_sq = 0;
  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask
  function automatic word_t isqrt_ref(word_t x);
    word_t r;
    r = 0;
    for (int i = 31; i >= 0; i--) if ((r | (64'd1 << i)) * (r | (64'd1 << i)) <= x) r |= 64'd1 << i;
    return r;
  endfunction
  function automatic word_t ref_op(fu_op_e o, word_t x, word_t z);
    word_t r;
    r = '0;
    case (o)
      OP_PASS: r = x;
      OP_ADD:  r = x + z;
      OP_SUB:  r = x - z;
      OP_MUL:  r = x * z;
      OP_ADD4: for (int l = 0; l < 4; l++) r[16*l +: 16] = x[16*l +: 16] + z[16*l +: 16];
      OP_SUB4: for (int l = 0; l < 4; l++) r[16*l +: 16] = x[16*l +: 16] - z[16*l +: 16];
      OP_MUL4: for (int l = 0; l < 4; l++) begin
                 logic signed [31:0] p;
                 p = $signed(x[16*l +: 16]) * $signed(z[16*l +: 16]);
                 r[16*l +: 16] = p[23:8];
               end
      OP_DIV:  r = (z == 0) ? '1 : x / z;
      OP_SQRT: r = isqrt_ref(x);
      default: r = '0;
    endcase
    return r;
  endfunction
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    word_t exp1 [2];
    logic  expv [2];
    word_t sq_q [$];
    int    since;
    fu_op_e add_ops [5] = '{OP_PASS, OP_ADD, OP_SUB, OP_ADD4, OP_SUB4};
    fu_op_e mul_ops [3] = '{OP_PASS, OP_MUL, OP_MUL4};
    for (int u = 0; u < 3; u++) begin v[u] = 0; op[u] = OP_NOP; a[u] = '0; b[u] = '0; end
    expv = '{0, 0}; exp1 = '{0, 0};
    since = 100;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      for (int u = 0; u < 2; u++) begin
        check("valid", ov[u], expv[u]);
        if (expv[u]) check("result", y[u], exp1[u]);
      end
      if (ov[2]) begin
        n_sq++;
        check("sqrt/div out of thin air", sq_q.size() != 0, 1);
        if (sq_q.size() != 0) check("sqrt/div result", y[2], sq_q.pop_front());
      end
      v[0] = $urandom_range(0, 3) != 0; op[0] = add_ops[$urandom_range(0, 4)];
      v[1] = $urandom_range(0, 3) != 0; op[1] = mul_ops[$urandom_range(0, 2)];
      v[2] = $urandom_range(0, 2) == 0; op[2] = $urandom_range(0, 1) ? OP_SQRT : OP_DIV;
      for (int u = 0; u < 3; u++) begin
        a[u] = {$urandom, $urandom};
        b[u] = $urandom_range(0, 9) == 0 ? 64'd0 : {32'd0, $urandom} >> $urandom_range(0, 31);
      end
      for (int u = 0; u < 2; u++) begin expv[u] = v[u]; exp1[u] = ref_op(op[u], a[u], b[u]); end
      #1;
      check("dropped", dr[2], v[2] && since < 5);
      n_drop += dr[2];
      if (v[2] && since >= 5) begin sq_q.push_back(ref_op(op[2], a[2], b[2])); since = 0; end
      @(posedge clk);
      since++;
    end
    v[2] = 0;
    repeat (14) begin @(negedge clk); if (ov[2]) check("sqrt/div tail", y[2], sq_q.pop_front()); end
    check("all sqrt/div results returned", sq_q.size(), 0);
    checks++; if (n_drop == 0 || n_sq == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
