// fu: functional unit of a compute-fabric tile.
//
// KIND selects the unit: FU_ADD (adder: 64-bit add/sub and 4-way 16-bit subword
// add/sub), FU_MUL (multiplier: 64-bit multiply, low half, and 4-way Q8.8
// fixed-point subword multiply) or FU_SQRT (divide / square root). Every kind also
// passes an operand through (OP_PASS). OP_ACC is computed as an add; the tile owns
// the accumulator register.
// Adders and multipliers take one cycle and accept an operation every cycle. The
// sqrt/div unit has a latency of 12 cycles and accepts one operation every 5
// cycles; an operation offered while it is busy is not accepted and raises
// `dropped` for that cycle (the fabric compiler is expected to space such
// operations). Division and square root are unsigned 64-bit integer operations;
// division by zero returns all ones.
// Floating-point arithmetic (2-way FP subword SIMD) is not implemented.
module fu import revel_pkg::*; #(
  parameter fu_kind_e KIND = FU_ADD
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  fu_op_e op,
  input  word_t  a,
  input  word_t  b,
  output logic   out_valid,
  output word_t  y,
  output logic   dropped
);
  localparam int unsigned SQ_LAT = 12;
  localparam int unsigned SQ_II  = 5;

  function automatic word_t isqrt(input word_t v);
    word_t r, bit_, x;
    x = v; r = '0; bit_ = 64'h4000_0000_0000_0000;
    for (int i = 0; i < 32; i++) begin
      if (x >= r + bit_) begin
        x = x - (r + bit_);
        r = (r >> 1) + bit_;
      end else begin
        r = r >> 1;
      end
      bit_ = bit_ >> 2;
    end
    return r;
  endfunction

  word_t res;
  always_comb begin
    logic signed [31:0] p;
    p   = '0;
    res = '0;
    unique case (op)
      OP_PASS: res = a;
      OP_ADD, OP_ACC: if (KIND == FU_ADD) res = a + b;
      OP_SUB:  if (KIND == FU_ADD) res = a - b;
      OP_ADD4: if (KIND == FU_ADD) for (int l = 0; l < 4; l++) res[16*l +: 16] = a[16*l +: 16] + b[16*l +: 16];
      OP_SUB4: if (KIND == FU_ADD) for (int l = 0; l < 4; l++) res[16*l +: 16] = a[16*l +: 16] - b[16*l +: 16];
      OP_MUL:  if (KIND == FU_MUL) res = a * b;
      OP_MUL4: if (KIND == FU_MUL)
                 for (int l = 0; l < 4; l++) begin
                   p = $signed(a[16*l +: 16]) * $signed(b[16*l +: 16]);
                   res[16*l +: 16] = p[23:8];
                 end
      OP_DIV:  if (KIND == FU_SQRT) res = (b == 0) ? '1 : a / b;
      OP_SQRT: if (KIND == FU_SQRT) res = isqrt(a);
      default: res = '0;
    endcase
  end

  if (KIND == FU_SQRT) begin : g_long
    logic [SQ_LAT-1:0] vpipe;
    word_t             dpipe [SQ_LAT];
    logic [2:0]        busy;
    logic              accept;
    assign accept  = in_valid && (busy == 0);
    assign dropped = in_valid && (busy != 0);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vpipe <= '0;
        busy  <= '0;
      end else begin
        vpipe <= {vpipe[SQ_LAT-2:0], accept};
        busy  <= accept ? 3'(SQ_II - 1) : (busy != 0 ? busy - 1'b1 : busy);
      end
    end
    always_ff @(posedge clk) begin
      dpipe[0] <= res;
      for (int i = 1; i < SQ_LAT; i++) dpipe[i] <= dpipe[i-1];
    end
    assign out_valid = vpipe[SQ_LAT-1];
    assign y         = dpipe[SQ_LAT-1];
  end else begin : g_short
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) out_valid <= 1'b0;
      else        out_valid <= in_valid;
    always_ff @(posedge clk) y <= res;
    assign dropped = 1'b0;
  end
endmodule
