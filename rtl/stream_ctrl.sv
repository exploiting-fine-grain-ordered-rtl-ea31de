// stream_ctrl: stream control of a lane's private scratchpad.
//
// Holds up to NENT concurrent streams (an 8-entry stream table). Each stream walks
// a 2-D inductive (RI) pattern
//     for j in 0 .. n_j-1
//       for i in 0 .. ceil(n_i + j*s_ji)-1
//         addr = start + j*c_j + i*c_i
// tracking its iterators (i, j) and its current row length, which grows by the
// fixed-point stretch s_ji after every row. Stream kinds handled here:
//   CMD_LOCAL_LD  scratchpad -> input port
//   CMD_LOCAL_ST  output port -> scratchpad
//   CMD_CONST     row j is ceil(n_i + j*s_ji)-1 copies of val1 then one val2 -> input port
//   CMD_CONFIG    n_i contiguous scratchpad words -> fabric configuration words 0,1,2...
// One stream advances per cycle. It moves a group of up to 8 words: the words of the
// current row that lie in one scratchpad line (c_i = 0 or 1; one word per cycle for
// other strides), limited by the space left in the destination port or the words
// waiting in the source port. The last word of a row carries an end-of-row tag;
// the input port uses it for implicit vector masking of the last, partial vector.
// Among the streams that can advance, the one whose port is closest to stalling is
// chosen: the fewest vectors buffered in its input port, or the fewest free vectors
// in its output port ("cycles-to-stall"); ties go to the lower table index.
// Timing: a load group is read in the cycle it is chosen and reaches the input port
// one cycle later (scratchpad read latency); a store group is written in the cycle
// it is chosen. When a stream is accepted, its reuse parameters (n_c, s_c) are sent
// to its input port. done pulses for one cycle when a stream's last group is moved.
// rd_block / wr_block keep streams off the scratchpad ports while the shared
// scratchpad bus uses them.
module stream_ctrl import revel_pkg::*; #(
  parameter int unsigned NENT  = 8,
  parameter int unsigned LINES = 128
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // stream issue from the command queue
  input  logic                       issue_valid,
  input  cmd_t                       issue_cmd,
  output logic                       issue_ready,
  // port status
  input  logic [NIPORT-1:0][6:0]     ip_free,   // free words per input port
  input  logic [NIPORT-1:0][6:0]     ip_count,  // buffered words per input port
  input  logic [NIPORT-1:0][3:0]     ip_other,  // words another source pushes this cycle
  input  logic [NOPORT-1:0][6:0]     op_count,  // buffered words per output port
  input  logic [NOPORT-1:0][6:0]     op_free,
  input  line_t [NOPORT-1:0]         op_head,
  output logic [NOPORT-1:0][3:0]     op_pop,
  // input port push
  output logic                       ip_push_valid,
  output logic [2:0]                 ip_push_port,
  output wgroup_t                    ip_push,
  // input port reuse configuration
  output logic                       ip_cfg_valid,
  output logic [2:0]                 ip_cfg_port,
  output logic [CNT_W-1:0]           ip_cfg_nr,
  output logic signed [CNT_W-1:0]    ip_cfg_sr,
  // fabric configuration words
  output logic                       cfg_valid,
  output logic [CNT_W-1:0]           cfg_addr,   // index of the first word
  output wgroup_t                    cfg_group,
  // scratchpad ports
  input  logic                       rd_block,
  input  logic                       wr_block,
  output logic                       sp_re,
  output logic [$clog2(LINES)-1:0]   sp_raddr,
  input  line_t                      sp_rdata,
  output logic                       sp_we,
  output logic [$clog2(LINES)-1:0]   sp_waddr,
  output logic [LINE_W-1:0]          sp_wmask,
  output line_t                      sp_wdata,
  // completion
  output logic                       done,
  output cmd_op_e                    done_op,
  output logic [2:0]                 done_port,
  output logic [NENT-1:0]            active
);
  localparam int unsigned LW = $clog2(LINES);
  localparam int unsigned LEN_W = CNT_W + FRAC + 1;

  typedef struct packed {
    logic                     valid;
    cmd_op_e                  op;
    logic [2:0]               port;
    logic [ADDR_W-1:0]        base;
    logic signed [CNT_W-1:0]  c_i;
    logic signed [CNT_W-1:0]  c_j;
    logic [CNT_W-1:0]         i;
    logic [CNT_W-1:0]         j;
    logic [CNT_W-1:0]         n_j;
    logic signed [LEN_W-1:0]  len;
    logic signed [CNT_W-1:0]  s_ji;
    word_t                    val1;
    word_t                    val2;
    logic [CNT_W-1:0]         cfg_idx;
  } sentry_t;

  sentry_t tab [NENT];

  // pending load / const / config group (pushed one cycle after it is chosen)
  logic              pend_valid;
  cmd_op_e           pend_op;
  logic [2:0]        pend_port;
  logic [3:0]        pend_n;
  logic [2:0]        pend_off;
  logic              pend_unit;     // c_i == 1 (else all words from one offset)
  logic              pend_eor;
  word_t             pend_v1, pend_v2;
  logic              pend_last_v2;  // last word of the group is val2
  logic [CNT_W-1:0]  pend_cfg_idx;

  // per-entry candidate
  logic [NENT-1:0]   elig;
  logic [3:0]        grp_n [NENT];
  logic [7:0]        key   [NENT];
  logic [CNT_W-1:0]  rowlen[NENT];
  logic [ADDR_W-1:0] cur_addr[NENT];

  function automatic logic [2:0] wshift(input logic [2:0] p);
    case (p)   // log2 of the port width in words
      3'd0, 3'd1: return 3'd3;
      3'd2, 3'd3: return 3'd2;
      3'd4:       return 3'd1;
      default:    return 3'd0;
    endcase
  endfunction

  always_comb begin
    for (int e = 0; e < NENT; e++) begin
      logic [CNT_W-1:0] rem;
      logic [3:0]       lim;
      logic [6:0]       avail;
      rowlen[e]   = fx_ceil(tab[e].len);
      rem         = (tab[e].i < rowlen[e]) ? rowlen[e] - tab[e].i : '0;
      cur_addr[e] = ADDR_W'($signed(tab[e].base) + $signed(tab[e].i) * tab[e].c_i);
      avail       = '0;
      key[e]      = '0;
      case (tab[e].op)
        CMD_LOCAL_LD, CMD_CONST: begin
          avail  = ip_free[tab[e].port];
          if (pend_valid && pend_port == tab[e].port &&
              (pend_op == CMD_LOCAL_LD || pend_op == CMD_CONST))
            avail = (avail > 7'(pend_n)) ? avail - 7'(pend_n) : '0;
          avail = (avail > 7'(ip_other[tab[e].port])) ? avail - 7'(ip_other[tab[e].port]) : '0;
          key[e] = 8'(ip_count[tab[e].port] >> wshift(tab[e].port));
        end
        CMD_LOCAL_ST: begin
          avail  = op_count[tab[e].port];
          key[e] = 8'(op_free[tab[e].port] >> wshift(tab[e].port));
        end
        default: avail = 7'd8;  // configuration
      endcase
      lim = (avail > 7'd8) ? 4'd8 : avail[3:0];
      if (rem < CNT_W'(lim)) lim = rem[3:0];
      if (tab[e].op != CMD_CONST) begin
        if (tab[e].c_i == 1) begin
          if (lim > 4'd8 - 4'(cur_addr[e][2:0])) lim = 4'd8 - 4'(cur_addr[e][2:0]);
        end else if (tab[e].c_i != 0) begin
          if (lim > 4'd1) lim = 4'd1;
        end
      end
      grp_n[e] = lim;
      elig[e]  = tab[e].valid && (rem == 0 || lim != 0);
      if (rem != 0 && (tab[e].op == CMD_LOCAL_LD || tab[e].op == CMD_CONFIG) && rd_block) elig[e] = 1'b0;
      if (rem != 0 && tab[e].op == CMD_LOCAL_ST && wr_block) elig[e] = 1'b0;
    end
  end

  // choose the most urgent eligible stream
  logic              sel_v;
  logic [$clog2(NENT)-1:0] sel;
  always_comb begin
    sel_v = 1'b0;
    sel   = '0;
    for (int e = 0; e < NENT; e++)
      if (elig[e] && (!sel_v || key[e] < key[sel])) begin
        sel_v = 1'b1;
        sel   = ($clog2(NENT))'(e);
      end
  end

  // free slot for a new stream
  logic              free_v;
  logic [$clog2(NENT)-1:0] free_idx;
  always_comb begin
    free_v = 1'b0;
    free_idx = '0;
    for (int e = NENT - 1; e >= 0; e--)
      if (!tab[e].valid) begin
        free_v = 1'b1;
        free_idx = ($clog2(NENT))'(e);
      end
  end
  assign issue_ready = free_v;
  always_comb
    for (int e = 0; e < NENT; e++) active[e] = tab[e].valid;

  assign ip_cfg_valid = issue_valid && issue_ready &&
                        (issue_cmd.op == CMD_LOCAL_LD || issue_cmd.op == CMD_CONST);
  assign ip_cfg_port  = issue_cmd.port;
  assign ip_cfg_nr    = (issue_cmd.n_c == 0) ? CNT_W'(1 << FRAC) : CNT_W'(issue_cmd.n_c << FRAC);
  assign ip_cfg_sr    = issue_cmd.s_c;

  // the chosen group
  logic [CNT_W-1:0] s_rem;
  logic             s_row_end, s_last;
  always_comb begin
    s_rem     = (tab[sel].i < rowlen[sel]) ? rowlen[sel] - tab[sel].i : '0;
    s_row_end = sel_v && (s_rem == CNT_W'(grp_n[sel]));
    s_last    = s_row_end && (tab[sel].j + 1'b1 >= tab[sel].n_j);
  end

  // store path: write in the chosen cycle
  always_comb begin
    logic [2:0] o;
    o        = '0;
    sp_we    = 1'b0;
    sp_waddr = cur_addr[sel][3 +: LW];
    sp_wmask = '0;
    sp_wdata = '0;
    op_pop   = '0;
    if (sel_v && tab[sel].op == CMD_LOCAL_ST && grp_n[sel] != 0) begin
      sp_we = 1'b1;
      for (int k = 0; k < LINE_W; k++)
        if (k < int'(grp_n[sel])) begin
          o = (tab[sel].c_i == 0) ? cur_addr[sel][2:0] : 3'(cur_addr[sel][2:0] + 3'(k));
          sp_wmask[o] = 1'b1;
          sp_wdata[o] = op_head[tab[sel].port][k];
        end
      op_pop[tab[sel].port] = grp_n[sel];
    end
  end

  assign sp_re    = sel_v && grp_n[sel] != 0 && (tab[sel].op == CMD_LOCAL_LD || tab[sel].op == CMD_CONFIG);
  assign sp_raddr = cur_addr[sel][3 +: LW];

  // push of the pending group
  always_comb begin
    wgroup_t g;
    g = '0;
    g.n = pend_n;
    g.eor = pend_eor;
    for (int k = 0; k < LINE_W; k++)
      if (k < int'(pend_n)) begin
        if (pend_op == CMD_CONST)
          g.data[k] = (pend_last_v2 && k == int'(pend_n) - 1) ? pend_v2 : pend_v1;
        else
          g.data[k] = sp_rdata[pend_unit ? 3'(pend_off + 3'(k)) : pend_off];
      end
    ip_push       = g;
    cfg_group     = g;
    ip_push_valid = pend_valid && pend_op != CMD_CONFIG;
    ip_push_port  = pend_port;
    cfg_valid     = pend_valid && pend_op == CMD_CONFIG;
    cfg_addr      = pend_cfg_idx;
  end

  assign done      = sel_v && s_last;
  assign done_op   = tab[sel].op;
  assign done_port = tab[sel].port;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NENT; e++) tab[e] <= '0;
      pend_valid <= 1'b0;
    end else begin
      pend_valid <= 1'b0;
      if (sel_v) begin
        if (grp_n[sel] != 0 && tab[sel].op != CMD_LOCAL_ST) begin
          pend_valid   <= 1'b1;
          pend_op      <= tab[sel].op;
          pend_port    <= tab[sel].port;
          pend_n       <= grp_n[sel];
          pend_off     <= cur_addr[sel][2:0];
          pend_unit    <= (tab[sel].c_i == 1);
          pend_eor     <= s_row_end;
          pend_v1      <= tab[sel].val1;
          pend_v2      <= tab[sel].val2;
          pend_last_v2 <= s_row_end;
          pend_cfg_idx <= tab[sel].cfg_idx;
        end
        tab[sel].cfg_idx <= tab[sel].cfg_idx + CNT_W'(grp_n[sel]);
        if (s_row_end || s_rem == 0) begin
          tab[sel].i    <= '0;
          tab[sel].j    <= tab[sel].j + 1'b1;
          tab[sel].base <= ADDR_W'($signed(tab[sel].base) + tab[sel].c_j);
          tab[sel].len  <= tab[sel].len + LEN_W'(tab[sel].s_ji);
          if (tab[sel].j + 1'b1 >= tab[sel].n_j) tab[sel].valid <= 1'b0;
        end else begin
          tab[sel].i <= tab[sel].i + CNT_W'(grp_n[sel]);
        end
      end
      if (issue_valid && issue_ready) begin
        tab[free_idx].valid   <= (issue_cmd.n_j != 0);
        tab[free_idx].op      <= issue_cmd.op;
        tab[free_idx].port    <= issue_cmd.port;
        tab[free_idx].base    <= issue_cmd.addr;
        tab[free_idx].c_i     <= (issue_cmd.op == CMD_CONFIG) ? CNT_W'(1) : issue_cmd.c_i;
        tab[free_idx].c_j     <= issue_cmd.c_j;
        tab[free_idx].i       <= '0;
        tab[free_idx].j       <= '0;
        tab[free_idx].n_j     <= issue_cmd.n_j;
        tab[free_idx].len     <= LEN_W'(issue_cmd.n_i) <<< FRAC;
        tab[free_idx].s_ji    <= issue_cmd.s_ji;
        tab[free_idx].val1    <= issue_cmd.val1;
        tab[free_idx].val2    <= issue_cmd.val2;
        tab[free_idx].cfg_idx <= '0;
      end
    end
  end

  a_issue_ok: assert property (@(posedge clk) disable iff (!rst_n) issue_valid |-> issue_cmd.op inside
                               {CMD_LOCAL_LD, CMD_LOCAL_ST, CMD_CONST, CMD_CONFIG});
endmodule
