// tb_out_port: random test of an output vector port (W = 4, 16-word FIFO).
// The fabric side pushes vectors with random masks whenever a whole vector fits;
// the consumer pops 0..8 words at random. The reference model appends only the
// unmasked words, in order, and the head (first 8 words) and count are checked
// every cycle.
module tb_out_port;
  import revel_pkg::*;
  localparam int W = 4, DEPTH = 4 * W;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic vec_valid = 0;
  word_t [W-1:0] vec_data = '0;
  logic [W-1:0] vec_mask = '0;
  logic [$clog2(DEPTH):0] free, count;
  line_t head;
  logic [3:0] pop_n = '0;
  out_port #(.W(W)) dut (.*);

  int checks = 0, failures = 0;
  word_t mq [$];
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
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      int p;
      @(negedge clk);
      check("count", count, mq.size());
      check("free", free, DEPTH - mq.size());
      for (int i = 0; i < LINE_W && i < mq.size(); i++) check("head", head[i], mq[i]);
      vec_valid = (free >= W) && $urandom_range(0, 1);
      vec_mask  = $urandom;
      for (int i = 0; i < W; i++) vec_data[i] = {$urandom, $urandom};
      p = $urandom_range(0, 8);
      if (p > mq.size()) p = mq.size();
      pop_n = 4'(p);
      @(posedge clk); #1;
      repeat (p) void'(mq.pop_front());
      if (vec_valid) for (int i = 0; i < W; i++) if (vec_mask[i]) mq.push_back(vec_data[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
