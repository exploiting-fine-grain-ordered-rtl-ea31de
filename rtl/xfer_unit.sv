// xfer_unit: XFER stream unit of a lane.
//
// Holds up to NENT (8) XFER streams. An XFER stream moves values from one of this
// lane's output ports to an input port of this lane or of another lane, which is
// how dataflows with fine-grain dependences communicate without going through
// memory. Its pattern is inductive in the same way as a memory stream: n_j rows,
// row j carrying ceil(n_p + j*s_p) values (n_p in the command's n_i field, s_p in
// s_ji); a row with no values is skipped. The last value of a row carries the
// end-of-row tag, so a vector consumer sees a partial, masked vector there.
// Each cycle the lowest-index stream whose source port holds data requests the
// lane's 512-bit XFER bus with a group of up to 8 values; the group moves, and the
// source port is popped, in the cycle the inter-lane network grants the request.
// The first group of a stream also carries the destination port's reuse
// parameters (n_c, s_c). done pulses when a stream's last group is granted.
module xfer_unit import revel_pkg::*; #(
  parameter int unsigned NENT = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   issue_valid,
  input  cmd_t                   issue_cmd,   // dlane holds the absolute destination lane
  output logic                   issue_ready,
  input  logic [NOPORT-1:0][6:0] op_count,
  input  line_t [NOPORT-1:0]     op_head,
  output logic [NOPORT-1:0][3:0] op_pop,
  output xfer_t                  req,
  input  logic                   gnt,
  output logic                   done,
  output logic [2:0]             done_port,   // source output port
  output logic [2:0]             done_lane,   // destination lane
  output logic [2:0]             done_dport,  // destination input port
  output logic [NENT-1:0]        active
);
  localparam int unsigned LEN_W = CNT_W + FRAC + 1;
  typedef struct packed {
    logic                    valid;
    logic                    first;
    logic [2:0]              src;
    logic [2:0]              lane;
    logic [2:0]              port;
    logic [CNT_W-1:0]        i;
    logic [CNT_W-1:0]        j;
    logic [CNT_W-1:0]        n_j;
    logic signed [LEN_W-1:0] len;
    logic signed [CNT_W-1:0] s_p;
    logic [CNT_W-1:0]        nr;
    logic signed [CNT_W-1:0] sr;
  } xentry_t;

  xentry_t tab [NENT];
  logic [CNT_W-1:0] rem [NENT];
  logic [3:0]       grp [NENT];
  logic [NENT-1:0]  elig;
  logic             sel_v;
  logic [$clog2(NENT)-1:0] sel;

  always_comb begin
    for (int e = 0; e < NENT; e++) begin
      logic [CNT_W-1:0] rl;
      logic [6:0]       c;
      rl     = fx_ceil(tab[e].len);
      rem[e] = (tab[e].i < rl) ? rl - tab[e].i : '0;
      c      = op_count[tab[e].src];
      grp[e] = (c > 7'd8) ? 4'd8 : c[3:0];
      if (rem[e] < CNT_W'(grp[e])) grp[e] = rem[e][3:0];
      active[e] = tab[e].valid;
      elig[e]   = tab[e].valid && (rem[e] == 0 || grp[e] != 0);
    end
    sel_v = 1'b0;
    sel   = '0;
    for (int e = NENT - 1; e >= 0; e--)
      if (elig[e]) begin
        sel_v = 1'b1;
        sel   = ($clog2(NENT))'(e);
      end
  end

  logic row_end, moving, advance;
  assign row_end = (rem[sel] == CNT_W'(grp[sel]));
  assign moving  = sel_v && grp[sel] != 0;
  assign advance = sel_v && (rem[sel] == 0 || gnt);

  always_comb begin
    req       = '0;
    req.v     = moving;
    req.lane  = tab[sel].lane;
    req.port  = tab[sel].port;
    req.cfg   = tab[sel].first;
    req.nr    = tab[sel].nr;
    req.sr    = tab[sel].sr;
    req.g.n   = grp[sel];
    req.g.eor = row_end;
    req.g.data = op_head[tab[sel].src];
    op_pop    = '0;
    if (moving && gnt) op_pop[tab[sel].src] = grp[sel];
  end

  logic free_v;
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
  assign done      = advance && (rem[sel] == 0 || row_end) && (tab[sel].j + 1'b1 >= tab[sel].n_j);
  assign done_port  = tab[sel].src;
  assign done_lane  = tab[sel].lane;
  assign done_dport = tab[sel].port;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NENT; e++) tab[e] <= '0;
    end else begin
      if (advance) begin
        if (moving) tab[sel].first <= 1'b0;
        if (rem[sel] == 0 || row_end) begin
          tab[sel].i   <= '0;
          tab[sel].j   <= tab[sel].j + 1'b1;
          tab[sel].len <= tab[sel].len + LEN_W'(tab[sel].s_p);
          if (tab[sel].j + 1'b1 >= tab[sel].n_j) tab[sel].valid <= 1'b0;
        end else begin
          tab[sel].i <= tab[sel].i + CNT_W'(grp[sel]);
        end
      end
      if (issue_valid && issue_ready) begin
        tab[free_idx].valid <= (issue_cmd.n_j != 0);
        tab[free_idx].first <= 1'b1;
        tab[free_idx].src   <= issue_cmd.port;
        tab[free_idx].lane  <= issue_cmd.dlane;
        tab[free_idx].port  <= issue_cmd.port2;
        tab[free_idx].i     <= '0;
        tab[free_idx].j     <= '0;
        tab[free_idx].n_j   <= issue_cmd.n_j;
        tab[free_idx].len   <= LEN_W'(issue_cmd.n_i) <<< FRAC;
        tab[free_idx].s_p   <= issue_cmd.s_ji;
        tab[free_idx].nr    <= (issue_cmd.n_c == 0) ? CNT_W'(1 << FRAC) : CNT_W'(issue_cmd.n_c << FRAC);
        tab[free_idx].sr    <= issue_cmd.s_c;
      end
    end
  end

  a_issue_xfer: assert property (@(posedge clk) disable iff (!rst_n) issue_valid |-> issue_cmd.op == CMD_XFER);
endmodule
