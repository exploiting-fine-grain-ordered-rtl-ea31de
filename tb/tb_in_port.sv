// tb_in_port: random test of an input vector port (W = 4, 16-word FIFO).
// Word groups of 0..8 words with random end-of-row tags are pushed whenever space
// allows, and the fabric side consumes at random. A reference model holds the words
// and their tags and predicts the head vector (cut after the first end-of-row tag,
// masked and zero-padded), vec_valid, and the inductive reuse schedule: starting
// from n_r = 2.75 with stretch s_r = -0.5, each vector must be consumed ceil(n_r)
// times (at least once) before the next one appears, and n_r grows by s_r per
// vector. Later the port is reconfigured to n_r = 0.5, s_r = +0.75.
module tb_in_port;
  import revel_pkg::*;
  localparam int W = 4, DEPTH = 4 * W;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a falling edge applies the asynchronous reset before the first clock
  always #5 clk = ~clk;
  logic [3:0] push_n = '0;
  line_t push_data = '0;
  logic [LINE_W-1:0] push_eor = '0;
  logic [$clog2(DEPTH):0] free, count;
  logic cfg_valid = 0;
  logic [CNT_W-1:0] cfg_nr = '0;
  logic signed [CNT_W-1:0] cfg_sr = '0;
  logic vec_valid, consume = 0, reuse_hit;
  word_t [W-1:0] vec_data;
  logic [W-1:0] vec_mask;
  in_port #(.W(W)) dut (.*);

  int checks = 0, failures = 0, n_reuse = 0, n_masked = 0;
  word_t mq [$];
  bit    mt [$];
  int    nr, sr, used;

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got !== exp) begin failures++; if (failures < 10) $display("FAIL %s got %0h exp %0h", what, got, exp); end
  endtask
  function automatic int uses_of(int v);
    int c;
    c = (v <= 0) ? 0 : (v + 255) / 256;
    return (c == 0) ? 1 : c;
  endfunction

  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_valid = 1; cfg_nr = 16'd704; cfg_sr = -16'sd128;
    nr = 704; sr = -128; used = 0;
    @(negedge clk); cfg_valid = 0;
    for (int it = 0; it < 6000; it++) begin
      int k, n;
      bit ev;
      if (it == 3000) begin
        // drain complete vectors, then reconfigure
        push_n = '0;
        while (mq.size() != 0) begin
          k = 0;
          for (int i = 0; i < mq.size() && i < W; i++) begin k = i + 1; if (mt[i]) break; end
          ev = (mq.size() >= k) && (k == W || mt[k-1]);
          if (!ev) break;
          consume = 1;
          @(negedge clk);
          used++;
          if (used >= uses_of(nr)) begin repeat (k) begin void'(mq.pop_front()); void'(mt.pop_front()); end used = 0; nr += sr; end
        end
        consume = 0;
        cfg_valid = 1; cfg_nr = 16'd128; cfg_sr = 16'sd192;
        nr = 128; sr = 192; used = 0;
        @(negedge clk); cfg_valid = 0;
      end
      // expected head vector
      k = W;
      for (int i = 0; i < W && i < mq.size(); i++) if (mt[i]) begin k = i + 1; break; end
      ev = mq.size() >= k;
      check("vec_valid", vec_valid, ev);
      check("count", count, mq.size());
      if (ev) begin
        for (int i = 0; i < W; i++) begin
          check("mask", vec_mask[i], i < k);
          check("data", vec_data[i], (i < k) ? mq[i] : 64'd0);
        end
      end
      // stimulus
      consume = ev && ($urandom_range(0, 2) != 0);
      n = $urandom_range(0, 8);
      if (n > int'(free)) n = int'(free);
      push_n = 4'(n);
      for (int i = 0; i < LINE_W; i++) begin
        push_data[i] = {$urandom, $urandom};
        push_eor[i]  = ($urandom_range(0, 5) == 0);
      end
      #1;
      if (consume) check("reuse_hit", reuse_hit, used + 1 < uses_of(nr));
      n_reuse += (consume && reuse_hit);
      n_masked += (consume && k < W);
      @(negedge clk);
      if (consume) begin
        used++;
        if (used >= uses_of(nr)) begin
          repeat (k) begin void'(mq.pop_front()); void'(mt.pop_front()); end
          used = 0; nr += sr;
        end
      end
      for (int i = 0; i < n; i++) begin mq.push_back(push_data[i]); mt.push_back(push_eor[i]); end
    end
    checks++; if (n_reuse == 0) failures++;
    checks++; if (n_masked == 0) failures++;
    $display("reuse=%0d masked=%0d", n_reuse, n_masked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
