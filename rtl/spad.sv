// spad: single-bank scratchpad with one 512-bit read port and one 512-bit write port.
//
// Used both as a lane's private scratchpad and as the shared scratchpad. A line is
// LINE_W 64-bit words; the write port has a per-word enable so that a stream may
// write part of a line (store streams that end mid-line, masked vector words).
// Reads are synchronous: rdata is valid one cycle after re (read latency 1).
// A read and a write to the same line in one cycle return the old contents.
// The array is plain SystemVerilog and maps to an SRAM macro in a real flow.
// Default size: 128 lines of 512 bits (8 KB, the private scratchpad); the shared
// scratchpad instance overrides LINES.
module spad import revel_pkg::*; #(
  parameter int unsigned LINES = 128
) (
  input  logic                      clk,
  input  logic                      re,
  input  logic [$clog2(LINES)-1:0]  raddr,
  output line_t                     rdata,
  input  logic                      we,
  input  logic [$clog2(LINES)-1:0]  waddr,
  input  logic [LINE_W-1:0]         wmask,
  input  line_t                     wdata
);
  line_t mem [LINES];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we)
      for (int w = 0; w < LINE_W; w++)
        if (wmask[w]) mem[waddr][w] <= wdata[w];
  end
endmodule
