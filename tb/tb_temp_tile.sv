// tb_temp_tile: tests a temporal (triggered-instruction) adder tile.
// Program: inst 0: q0 + q1 -> r8; inst 1: r8 + q2 -> output;
//          inst 2: q3 - q3 (two operands from one queue) -> output.
// Queue sources: q0..q2 from corner switches 0..2, q3 from the other temporal
// tile's output (source 4). Values arrive at random times, slowly enough that no
// queue overflows. Register operands carry no ready bit (instruction order and
// spacing are the compiler's job), so c arrives 3..5 cycles after a and b. Results of inst 1 are recognised by bit 62 (the q2 values carry
// it) and must equal a[n] + b[n] + c[n] in order; inst 2 results must be 0.
// The test also checks that instructions with no queue source never issue.
module tb_temp_tile;
  import revel_pkg::*;
  localparam int NSRC = 4 + NTEMP;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic [16:0] insts [TINSTS];
  word_t cfg_qsrc;
  link_t [NSRC-1:0] src;
  link_t out;
  logic dropped;
  temp_tile #(.KIND(FU_ADD)) dut (.clk, .rst_n, .insts, .cfg_qsrc, .src, .out, .dropped);

  int checks = 0, failures = 0, n1 = 0, n2 = 0;
  word_t qa [$], qb [$], qc [$], q3n [$];
  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask
  function automatic logic [16:0] inst(fu_op_e o, int sa, int sb, int dst);
    return {1'b1, 4'(dst), 4'(sb), 4'(sa), 4'(o)};
  endfunction
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // output monitor
  always @(posedge clk) if (rst_n && out.v) begin
    if (out.d[62]) begin
      n1++;
      if (qa.size() == 0) check("unexpected inst1 result", 1, 0);
      else check("inst1 result", out.d, qa.pop_front() + qb.pop_front() + qc.pop_front());
    end else begin
      n2++;
      check("inst2 result", out.d, 0);
      if (q3n.size() != 0) void'(q3n.pop_front());
    end
  end
  initial begin
    for (int i = 0; i < TINSTS; i++) insts[i] = '0;
    insts[0] = inst(OP_ADD, 0, 1, 8);
    insts[1] = inst(OP_ADD, 8, 2, 0);
    insts[2] = inst(OP_SUB, 3, 3, 0);
    insts[3] = inst(OP_PASS, 9, 9, 0);   // no queue source: must never issue
    cfg_qsrc = 64'h4210;
    src = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      src = '0;
      // send one (a, b, c) triple at a time, at random offsets, then wait for it
      if (it % 10 == 0) begin
        word_t a, b, c;
        a = {24'd0, $urandom, 8'd0}; b = {24'd0, $urandom, 8'd0}; c = 64'h4000_0000_0000_0000 | $urandom;
        qa.push_back(a); qb.push_back(b); qc.push_back(c);
        src[0] = '{1'b1, a}; src[1] = '{1'b1, b};
        @(negedge clk); src = '0;
        // registers carry no ready bits: c arrives after r8 has been written
        repeat ($urandom_range(3, 5)) @(negedge clk);
        src[2] = '{1'b1, c};
        if ($urandom_range(0, 1)) begin src[4] = '{1'b1, {1'b0, 63'($urandom)}}; q3n.push_back(0); end
        @(negedge clk); src = '0;
      end
    end
    repeat (20) @(negedge clk);
    check("all inst1 results", qa.size(), 0);
    checks++; if (n1 == 0 || n2 == 0) begin failures++; $display("FAIL: instruction never issued"); end
    check("no drops", dropped, 0);
    $display("inst1=%0d inst2=%0d", n1, n2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
