// out_port: output vector port of a lane.
//
// Captures a vector of W words from the compute fabric when the fabric's output
// valid is set; only the words whose mask bit is set (lanes not predicated off) are
// kept, packed in lane order, so that the store or XFER stream that drains the port
// sees exactly the produced values. Storage is a FIFO of 4 vectors (4*W words).
// The drain side pops up to 8 words per cycle. The fabric must not push when the
// port lacks space: the data-firing logic reserves space before a dataflow fires.
module out_port import revel_pkg::*; #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4 * W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // fabric side
  input  logic                       vec_valid,
  input  word_t [W-1:0]              vec_data,
  input  logic [W-1:0]               vec_mask,
  output logic [$clog2(DEPTH):0]     free,
  // drain side
  output line_t                      head,
  output logic [$clog2(DEPTH):0]     count,
  input  logic [3:0]                 pop_n
);
  line_t       packed_data;
  logic [3:0]  push_n;
  logic [LINE_W-1:0] head_tag;

  always_comb begin
    packed_data = '0;
    push_n      = '0;
    if (vec_valid)
      for (int i = 0; i < W; i++)
        if (vec_mask[i]) begin
          packed_data[push_n[2:0]] = vec_data[i];
          push_n = push_n + 1'b1;
        end
  end

  word_fifo #(.DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push_n, .push_data(packed_data), .push_tag('0), .pop_n,
    .head, .head_tag, .count, .free
  );
endmodule
