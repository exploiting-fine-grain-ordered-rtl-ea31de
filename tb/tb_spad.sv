// tb_spad: random test of the lane scratchpad (128 lines of 512 bits).
// Random reads and per-word-masked writes are compared against a reference array;
// read data is checked one cycle after the read (synchronous read, latency 1).
// Every line is written once before it is read, so all checked data is initialised.
module tb_spad;
  import revel_pkg::*;
  localparam int LINES = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, we = 0;
  logic [$clog2(LINES)-1:0] raddr = '0, waddr = '0;
  logic [LINE_W-1:0] wmask = '0;
  line_t wdata = '0, rdata;
  spad #(.LINES(LINES)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wmask, .wdata);

  int checks = 0, failures = 0;
  line_t model [LINES];
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    line_t exp_q;
    logic  exp_v;
    // fill every line
    for (int l = 0; l < LINES; l++) begin
      @(negedge clk);
      we = 1; waddr = l[$clog2(LINES)-1:0]; wmask = '1;
      for (int w = 0; w < LINE_W; w++) wdata[w] = {$urandom, $urandom};
      model[l] = wdata;
    end
    @(negedge clk); we = 0;
    exp_v = 0; exp_q = '0;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rdata !== exp_q) begin failures++; if (failures < 10) $display("FAIL read it=%0d", it); end
      end
      re = $urandom_range(0, 1); raddr = $urandom_range(0, LINES - 1);
      we = $urandom_range(0, 1); waddr = $urandom_range(0, LINES - 1);
      wmask = $urandom;
      for (int w = 0; w < LINE_W; w++) wdata[w] = {$urandom, $urandom};
      // read-during-write to the same line returns the old contents
      exp_v = re; exp_q = model[raddr];
      if (we) for (int w = 0; w < LINE_W; w++) if (wmask[w]) model[waddr][w] = wdata[w];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
