// ded_tile: dedicated tile of the compute fabric.
//
// Executes the single operation its configuration word selects, fully pipelined.
// Two operand multiplexers choose among the tile-facing outputs of its four corner
// switches (0 = upper-left, 1 = upper-right, 2 = lower-left, 3 = lower-right), the
// tile's accumulator (4) or a 32-bit sign-extended constant from the configuration
// word (5). The result goes to the lower-right switch.
// Configuration word: [3:0] opcode, [6:4] operand A select, [9:7] operand B select,
// [63:32] constant.
// The mesh has no flow control; each link carries a valid bit. The tile fires when
// its switch operands are valid; accumulator and constant operands are always
// valid. OP_ACC (adder tiles) adds operand A into the accumulator; when operand B
// bit 0 is set (typically from a Const stream that closes an inner loop) the sum is
// emitted and the accumulator cleared, otherwise nothing is emitted.
// Latency: 1 cycle for add/mul tiles, 12 for the sqrt/div tile.
module ded_tile import revel_pkg::*; #(
  parameter fu_kind_e KIND = FU_ADD
) (
  input  logic        clk,
  input  logic        rst_n,
  input  word_t       cfg,
  input  link_t [3:0] corner,
  output link_t       out,
  output logic        dropped
);
  fu_op_e     op;
  logic [2:0] sa, sb;
  link_t      a, b;
  word_t      acc;
  logic       uses_b, fire, acc_emit;
  logic       fu_v;
  word_t      fu_y;

  assign op = fu_op_e'(cfg[3:0]);
  assign sa = cfg[6:4];
  assign sb = cfg[9:7];

  function automatic link_t pick(input logic [2:0] s, input link_t [3:0] c, input word_t acc_v, input word_t k);
    link_t r;
    case (s)
      3'd0, 3'd1, 3'd2, 3'd3: r = c[s[1:0]];
      3'd4:    r = '{v: 1'b1, d: acc_v};
      3'd5:    r = '{v: 1'b1, d: k};
      default: r = '0;
    endcase
    return r;
  endfunction

  assign a      = pick(sa, corner, acc, {{32{cfg[63]}}, cfg[63:32]});
  assign b      = pick(sb, corner, acc, {{32{cfg[63]}}, cfg[63:32]});
  assign uses_b = !(op inside {OP_PASS, OP_SQRT, OP_NOP});
  assign fire   = (op != OP_NOP) && a.v && (!uses_b || b.v);

  // OP_ACC is handled by the accumulator path; everything else by the unit.
  fu #(.KIND(KIND)) u_fu (
    .clk, .rst_n,
    .in_valid (fire && op != OP_ACC),
    .op, .a(a.d), .b(b.d),
    .out_valid(fu_v), .y(fu_y), .dropped
  );

  assign acc_emit = fire && op == OP_ACC && b.d[0];
  logic  acc_v_q;
  word_t acc_y_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      acc_v_q <= 1'b0;
    end else begin
      acc_v_q <= acc_emit;
      if (fire && op == OP_ACC) acc <= b.d[0] ? '0 : acc + a.d;
    end
  end
  always_ff @(posedge clk) acc_y_q <= acc + a.d;

  assign out = (op == OP_ACC) ? '{v: acc_v_q, d: acc_y_q} : '{v: fu_v, d: fu_y};
endmodule
