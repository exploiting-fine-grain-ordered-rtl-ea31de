// temp_tile: temporal (triggered-instruction) tile of the compute fabric.
//
// Time-multiplexes up to TINSTS static instructions over one functional unit, for
// the non-critical dataflows. Operands arrive in four input queues (depth 4). The
// source of each queue is configured: the tile-facing output of one of the four
// corner switches (0..3), or the output of another temporal tile (4 + index), which
// stands for the temporal region's own links. A value arriving on a full queue is
// lost: as in the dedicated mesh, there is no flow control into the fabric.
// An instruction is triggered when every queue it reads holds a value and the
// functional unit can accept it; among triggered instructions the one with the
// lowest index is scheduled, one per cycle. Queue operands are dequeued when the
// instruction issues. Results go to the output link (towards the lower-right
// switch) or to one of eight registers (RegFile), which later instructions read.
// Instruction word: [3:0] opcode, [7:4] source A, [11:8] source B, [15:12]
// destination, [16] valid. Sources 0..3 are queues, 8..15 registers; destination
// 0 is the output link, 8..15 a register. An instruction with no queue source never
// triggers. Queue-source word: 4 bits per queue. The instruction buffer contents
// are held in the fabric's configuration registers and arrive on `insts`.
module temp_tile import revel_pkg::*; #(
  parameter fu_kind_e    KIND  = FU_ADD,
  parameter int unsigned NSRC  = 4 + NTEMP,
  parameter int unsigned NINST = TINSTS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [16:0]       insts [NINST],
  input  word_t             cfg_qsrc,
  input  link_t [NSRC-1:0]  src,
  output link_t             out,
  output logic              dropped
);
  localparam int unsigned QD = 4;
  localparam int unsigned LAT = (KIND == FU_SQRT) ? 12 : 1;

  logic [16:0] ibuf [NINST];
  assign ibuf = insts;
  word_t       regs [8];
  word_t       q    [4][QD];
  logic [2:0]  qcnt [4];
  logic [3:0]  qpop;

  // --- instruction scheduling ---
  logic [NINST-1:0] trig;
  logic             issue;
  logic [$clog2(NINST)-1:0] isel;
  logic             busy;   // sqrt/div unit is not accepting
  logic [2:0]       ii_cnt;

  function automatic logic src_ready(input logic [3:0] s, input logic [2:0] c0, input logic [2:0] c1,
                                     input logic [2:0] c2, input logic [2:0] c3);
    case (s)
      4'd0: return c0 != 0;
      4'd1: return c1 != 0;
      4'd2: return c2 != 0;
      4'd3: return c3 != 0;
      default: return s[3];
    endcase
  endfunction

  always_comb begin
    for (int n = 0; n < NINST; n++) begin
      logic [3:0] a, b;
      logic       uses_b, has_q;
      fu_op_e     o;
      o      = fu_op_e'(ibuf[n][3:0]);
      a      = ibuf[n][7:4];
      b      = ibuf[n][11:8];
      uses_b = !(o inside {OP_PASS, OP_SQRT, OP_NOP});
      has_q  = !a[3] || (uses_b && !b[3]);
      trig[n] = ibuf[n][16] && has_q && !busy &&
                src_ready(a, qcnt[0], qcnt[1], qcnt[2], qcnt[3]) &&
                (!uses_b || src_ready(b, qcnt[0], qcnt[1], qcnt[2], qcnt[3]));
    end
    issue = 1'b0;
    isel  = '0;
    for (int n = NINST - 1; n >= 0; n--)
      if (trig[n]) begin
        issue = 1'b1;
        isel  = ($clog2(NINST))'(n);
      end
  end

  logic [16:0] inst;
  fu_op_e      iop;
  word_t       opa, opb;
  logic        iuses_b;
  assign inst    = ibuf[isel];
  assign iop     = fu_op_e'(inst[3:0]);
  assign iuses_b = !(iop inside {OP_PASS, OP_SQRT, OP_NOP});

  function automatic word_t rd_src(input logic [3:0] s, input word_t q0, input word_t q1,
                                   input word_t q2, input word_t q3, input word_t r);
    case (s)
      4'd0: return q0;
      4'd1: return q1;
      4'd2: return q2;
      4'd3: return q3;
      default: return r;
    endcase
  endfunction
  assign opa = rd_src(inst[7:4],  q[0][0], q[1][0], q[2][0], q[3][0], regs[inst[6:4]]);
  assign opb = rd_src(inst[11:8], q[0][0], q[1][0], q[2][0], q[3][0], regs[inst[10:8]]);

  always_comb begin
    qpop = '0;
    if (issue) begin
      if (!inst[7]) qpop[inst[5:4]] = 1'b1;
      if (iuses_b && !inst[11]) qpop[inst[9:8]] = 1'b1;
    end
  end

  // --- functional unit and result routing ---
  logic       fu_v;
  word_t      fu_y;
  logic [3:0] dpipe [LAT];
  fu #(.KIND(KIND)) u_fu (
    .clk, .rst_n, .in_valid(issue), .op(iop == OP_ACC ? OP_ADD : iop),
    .a(opa), .b(opb), .out_valid(fu_v), .y(fu_y), .dropped
  );
  always_ff @(posedge clk) begin
    dpipe[0] <= inst[15:12];
    for (int i = 1; i < LAT; i++) dpipe[i] <= dpipe[i-1];
  end
  assign out = '{v: fu_v && !dpipe[LAT-1][3], d: fu_y};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      ii_cnt <= '0;
    end else if (KIND == FU_SQRT) begin
      if (issue) begin busy <= 1'b1; ii_cnt <= 3'd3; end
      else if (ii_cnt != 0) ii_cnt <= ii_cnt - 1'b1;
      else busy <= 1'b0;
    end
  end

  always_ff @(posedge clk)
    if (fu_v && dpipe[LAT-1][3]) regs[dpipe[LAT-1][2:0]] <= fu_y;

  // --- input queues ---
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 4; k++) qcnt[k] <= '0;
    end else begin
      for (int k = 0; k < 4; k++) begin
        link_t s;
        logic  push;
        logic [2:0] c;
        s    = src[cfg_qsrc[4*k +: 4] < 4'(NSRC) ? cfg_qsrc[4*k +: 4] : 4'd0];
        push = s.v && (cfg_qsrc[4*k +: 4] < 4'(NSRC));
        c    = qcnt[k];
        if (qpop[k]) begin
          for (int e = 0; e < QD - 1; e++) q[k][e] <= q[k][e+1];
          c = c - 1'b1;
        end
        if (push && c < 3'(QD)) begin
          q[k][c[1:0]] <= s.d;
          c = c + 1'b1;
        end
        qcnt[k] <= c;
      end
    end
  end

endmodule
