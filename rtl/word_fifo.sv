// word_fifo: circular FIFO of 64-bit words with multi-word push and pop.
//
// Each word carries one tag bit (used as the end-of-row marker of a stream).
// Up to LINE_W words may be pushed and up to LINE_W popped in one cycle; the first
// LINE_W words at the head are always visible on head/head_tag. count is the
// current occupancy and free = DEPTH - count. Pushing more than free words or
// popping more than count words is a caller error and is flagged by assertions.
module word_fifo import revel_pkg::*; #(
  parameter int unsigned DEPTH = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [3:0]               push_n,
  input  line_t                    push_data,
  input  logic [LINE_W-1:0]        push_tag,
  input  logic [3:0]               pop_n,
  output line_t                    head,
  output logic [LINE_W-1:0]        head_tag,
  output logic [$clog2(DEPTH):0]   count,
  output logic [$clog2(DEPTH):0]   free
);
  localparam int unsigned AW = $clog2(DEPTH);
  word_t      mem [DEPTH];
  logic       tag [DEPTH];
  logic [AW-1:0] rd, wr;

  assign free = DEPTH[AW:0] - count;

  always_comb
    for (int k = 0; k < LINE_W; k++) begin
      head[k]     = mem[AW'(rd + AW'(k))];
      head_tag[k] = tag[AW'(rd + AW'(k))];
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; count <= '0;
    end else begin
      for (int k = 0; k < LINE_W; k++)
        if (k < int'(push_n)) begin
          mem[AW'(wr + AW'(k))] <= push_data[k];
          tag[AW'(wr + AW'(k))] <= push_tag[k];
        end
      wr    <= AW'(wr + AW'(push_n));
      rd    <= AW'(rd + AW'(pop_n));
      count <= count + (AW+1)'(push_n) - (AW+1)'(pop_n);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) (AW+1)'(push_n) <= free);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) (AW+1)'(pop_n) <= count);
endmodule
